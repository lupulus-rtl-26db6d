// lup_accumulator: partial-sum accumulator of one 3x3 PE group.
//
// Every cycle it forms, for each PE column c, the column sum
//     colsum[c] = sum_r psum[r][c]  (+ fwd_in[c] when fwd_en)
// and presents it on fwd_out, so that the accumulator of the group above can
// add it (the published 1x1-kernel mapping forwards partial sums upwards).
// On an accumulate command the value of each enabled lane is added into the
// partial-sum memory by read-modify-write:
//     MODE_CONV: every lane is offered colsum[GC-1] (the end of the row chains);
//                the command's one-hot lane picks where it goes.
//     MODE_PW  : lane c receives colsum[c] (one 1x1 kernel per PE column).
// Memory: GC lanes of ACC_DEPTH 16-bit words. The published size is 2048 bytes
// per group; with three lanes this design uses 3 x 341 words = 2046 bytes.
// Timing: command and psum in cycle t, memory read registered at the end of t,
// sum written at the end of t+1. The grid controller never sends two
// consecutive commands for the same lane and word (CONV rotates lanes, PW
// advances the word), so no read-after-write bypass is needed; an assertion
// checks it. `first` overwrites instead of
// adding. A drain read (rd_en, used when no command is active) returns
// rd_data one cycle later and holds it until the next read.
// The lane organisation and the drain port are this design's own;
// the paper states only what the accumulator does and its size.
module lup_accumulator
  import lup_pkg::*;
#(
  parameter int unsigned ACC_DEPTH = 341
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  mode_e                     mode,
  input  psum_t [GR-1:0][GC-1:0]    psum,
  input  logic                      fwd_en,
  input  psum_t [GC-1:0]            fwd_in,
  output psum_t [GC-1:0]            fwd_out,
  input  acc_cmd_t                  cmd,
  // drain read port
  input  logic                      rd_en,
  input  logic [ACC_AW-1:0]         rd_addr,
  input  logic [$clog2(GC)-1:0]     rd_lane,
  output psum_t                     rd_data
);

  localparam int unsigned AW = $clog2(ACC_DEPTH);

  psum_t mem [GC][ACC_DEPTH];

  psum_t [GC-1:0] colsum, val;
  psum_t [GC-1:0] old_d, old_q, val_q, new_v;
  logic           s1_valid, s1_first;
  logic [AW-1:0]  s1_addr;
  logic [GC-1:0]  s1_lane;
  logic [AW-1:0]  raddr;
  logic           re;
  logic [$clog2(GC)-1:0] rd_lane_q;

  always_comb begin
    for (int c = 0; c < GC; c++) begin
      colsum[c] = fwd_en ? fwd_in[c] : psum_t'(0);
      for (int r = 0; r < GR; r++) colsum[c] = colsum[c] + psum[r][c];
      val[c] = (mode == MODE_PW) ? colsum[c] : colsum[GC-1];
    end
  end
  assign fwd_out = colsum;

  // second stage: new value of each lane
  always_comb begin
    for (int c = 0; c < GC; c++) new_v[c] = s1_first ? val_q[c] : old_q[c] + val_q[c];
  end

  // read address: accumulate command first, drain otherwise
  assign re    = cmd.valid | rd_en;
  assign raddr = cmd.valid ? AW'(cmd.addr) : AW'(rd_addr);

  always_comb begin
    for (int c = 0; c < GC; c++) old_d[c] = mem[c][raddr];
  end

  always_ff @(posedge clk) begin
    if (re) old_q <= old_d;
    for (int c = 0; c < GC; c++)
      if (s1_valid && s1_lane[c]) mem[c][s1_addr] <= new_v[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_first  <= 1'b0;
      s1_addr   <= '0;
      s1_lane   <= '0;
      val_q     <= '0;
      rd_lane_q <= '0;
    end else begin
      s1_valid <= cmd.valid;
      s1_first <= cmd.first;
      s1_addr  <= AW'(cmd.addr);
      s1_lane  <= cmd.lane;
      val_q    <= val;
      if (rd_en) rd_lane_q <= rd_lane;
    end
  end

  assign rd_data = old_q[rd_lane_q];

  // A command must name a word that exists.
  a_no_raw_hazard: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd.valid && s1_valid && AW'(cmd.addr) == s1_addr) |-> ((cmd.lane & s1_lane) == '0));
  a_addr_range: assert property (@(posedge clk) disable iff (!rst_n)
    cmd.valid |-> (cmd.addr < ACC_AW'(ACC_DEPTH)));

endmodule
