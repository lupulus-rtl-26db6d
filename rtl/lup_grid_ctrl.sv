// lup_grid_ctrl: processing grid controller.
//
// Compute pass (start): streams columns c = 0 .. n_cols-1 of the selected
// input buffer bank, one per cycle, to every PE row at once. Column c reads
// byte ibuf_base + (c - pad_left); columns outside [pad_left, pad_left+img_w)
// are marked as padding and reach the PEs as zeros. Once a chain of
// chain_len PEs has seen its last pixel (c >= chain_len-1), output
// j = c - (chain_len-1) is complete; every stride-th one, up to n_out of them,
// is given an accumulate command:
//     MODE_CONV: lanes rotate 0,1,2 and the word address advances after lane 2,
//                so output k lands at acc_base + k/3, lane k%3;
//     MODE_PW  : all lanes, word acc_base + k (one word per pixel and lane).
// The command is delayed by LAT = 4 cycles, the path column issue ->
// buffer read (1) -> mesh register (1) -> PE product (1) -> PE sum (1), so it
// meets the partial sums it belongs to at the accumulators. `done` pulses when
// the last write has been made.
// Drain (drain_start): reads count words of one group's accumulator, word k at
// address base + k/3, lane k%3, and hands each out on a valid/ready port;
// a word waits as long as out_ready is low.
// Both records are copied when their sequence starts, so the global
// controller may already load the next pass while one runs. The copy `cfg`
// also drives the weight address, mesh routing and group masks of the pass.
// This controller follows the published role of the grid controller
// (configure the mesh, select weights, report status back); the column
// sequencing, the stride handling by skipping outputs and the drain sequence
// are this design's own.
module lup_grid_ctrl
  import lup_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  grid_cfg_t          cfg_in,
  output grid_cfg_t          cfg,        // configuration of the running pass
  input  logic               start,
  output logic               busy,
  output logic               done,
  input  drain_cfg_t         dcfg_in,
  input  logic               drain_start,
  output logic               drain_busy,
  output logic               drain_done,
  // input buffers
  output logic               ibuf_re,
  output logic [IB_AW-1:0]   ibuf_raddr,
  output logic               pad,        // aligned with the buffer read data
  // accumulators
  output acc_cmd_t           cmd,
  output logic               rd_en,
  output logic [4:0]         rd_group,
  output logic [ACC_AW-1:0]  rd_addr,
  output logic [1:0]         rd_lane,
  input  psum_t              rd_data,
  // results
  output logic               out_valid,
  input  logic               out_ready,
  output psum_t              out_data,
  output logic               out_last
);

  localparam int unsigned LAT = 4;

  drain_cfg_t dcfg;

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_FLUSH, S_DR_RD, S_DR_OUT} state_e;
  state_e state;

  logic [8:0]        col;
  logic [3:0]        phase;
  logic [9:0]        n_emit;
  logic [GC-1:0]     lane_oh;
  logic [ACC_AW-1:0] addr;
  logic [3:0]        flush_cnt;
  acc_cmd_t          cmd_now;
  acc_cmd_t          dly [LAT];
  logic [8:0]        rel;
  logic              in_chain;
  logic [11:0]       dk;
  logic [ACC_AW-1:0] daddr;
  logic [1:0]        dlane;

  // column issue
  always_comb begin
    rel        = col - 9'(cfg.pad_left);
    ibuf_re    = (state == S_RUN);
    ibuf_raddr = cfg.ibuf_base + IB_AW'(rel);
    in_chain   = (col >= 9'(cfg.chain_len) - 9'd1);
    cmd_now        = '0;
    cmd_now.valid  = (state == S_RUN) && in_chain && (phase == 4'd0) && (n_emit < cfg.n_out);
    cmd_now.first  = cfg.acc_first;
    cmd_now.addr   = addr;
    cmd_now.lane   = (cfg.mode == MODE_PW) ? '1 : lane_oh;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      col       <= '0;
      phase     <= '0;
      n_emit    <= '0;
      lane_oh   <= 3'b001;
      addr      <= '0;
      flush_cnt <= '0;
      pad       <= 1'b1;
      done      <= 1'b0;
      drain_done<= 1'b0;
      dk        <= '0;
      daddr     <= '0;
      dlane     <= '0;
      for (int i = 0; i < LAT; i++) dly[i] <= '0;
      cfg       <= '0;
      dcfg      <= '0;
    end else begin
      done       <= 1'b0;
      drain_done <= 1'b0;
      pad        <= (col < 9'(cfg.pad_left)) || (col >= 9'(cfg.pad_left) + cfg.img_w) || (state != S_RUN);
      dly[0]     <= cmd_now;
      for (int i = 1; i < LAT; i++) dly[i] <= dly[i-1];
      unique case (state)
        S_IDLE: begin
          if (start) begin
            cfg     <= cfg_in;
            state   <= S_RUN;
            col     <= '0;
            phase   <= '0;
            n_emit  <= '0;
            lane_oh <= 3'b001;
            addr    <= cfg_in.acc_base;
          end else if (drain_start) begin
            dcfg  <= dcfg_in;
            state <= S_DR_RD;
            dk    <= '0;
            daddr <= dcfg_in.base;
            dlane <= '0;
          end
        end
        S_RUN: begin
          if (in_chain) phase <= (phase + 4'd1 >= cfg.stride) ? 4'd0 : phase + 4'd1;
          if (cmd_now.valid) begin
            n_emit <= n_emit + 10'd1;
            if (cfg.mode == MODE_PW) begin
              addr <= addr + ACC_AW'(1);
            end else begin
              lane_oh <= {lane_oh[GC-2:0], lane_oh[GC-1]};
              if (lane_oh[GC-1]) addr <= addr + ACC_AW'(1);
            end
          end
          col <= col + 9'd1;
          if (col + 9'd1 >= cfg.n_cols) begin
            state     <= S_FLUSH;
            flush_cnt <= 4'(LAT + 2);
          end
        end
        S_FLUSH: begin
          flush_cnt <= flush_cnt - 4'd1;
          if (flush_cnt == 4'd1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_DR_RD: state <= S_DR_OUT;
        S_DR_OUT: begin
          if (out_ready) begin
            dk <= dk + 12'd1;
            if (dlane == 2'(GC-1)) begin
              dlane <= '0;
              daddr <= daddr + ACC_AW'(1);
            end else begin
              dlane <= dlane + 2'd1;
            end
            if (dk + 12'd1 >= dcfg.count) begin
              state      <= S_IDLE;
              drain_done <= 1'b1;
            end else begin
              state <= S_DR_RD;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign cmd        = dly[LAT-1];
  assign busy       = (state == S_RUN) || (state == S_FLUSH);
  assign drain_busy = (state == S_DR_RD) || (state == S_DR_OUT);
  assign rd_en      = (state == S_DR_RD);
  assign rd_group   = dcfg.group;
  assign rd_addr    = daddr;
  assign rd_lane    = dlane;
  assign out_valid  = (state == S_DR_OUT);
  assign out_data   = rd_data;
  assign out_last   = (dk + 12'd1 >= dcfg.count);

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (start || drain_start) |-> state == S_IDLE);
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_data)));

endmodule
