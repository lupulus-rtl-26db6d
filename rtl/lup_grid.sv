// lup_grid: the processing grid, ROWS x COLS PEs in groups of 3x3
// (published configuration: 15 x 12 PEs, i.e. 5 x 4 groups).
//
// PE row i receives pixel x[i] from the mesh network; all groups of a group
// row therefore see the same pixels and differ only in their weights, which
// is how several kernels share one input stream. Between groups:
//   * horizontal merge: the last PE column of group (gr, gc-1) feeds the first
//     PE column of group (gr, gc) when merge_mask has that group's bit, so a
//     kernel row of up to COLS taps forms one chain;
//   * upward forwarding: the column sums of group (gr+1, gc) are added by the
//     accumulator of group (gr, gc) when fwd_mask has its bit, so a kernel or
//     channel set spanning several group rows is summed in one accumulator.
// The forwarding chain is combinational through the group rows.
// Group g = gr*(COLS/3) + gc; PE p = i*COLS + j (row-major) for SPM writes.
// Only groups in store_mask execute accumulate commands. The drain port reads
// the accumulator of group drain_group.
module lup_grid
  import lup_pkg::*;
#(
  parameter int unsigned ROWS      = 15,
  parameter int unsigned COLS      = 12,
  parameter int unsigned SPM_BYTES = 32,
  parameter int unsigned ACC_DEPTH = 341
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  mode_e                         mode,
  input  data_t [ROWS-1:0]              x,
  input  logic  [ROWS-1:0]              pad,
  input  logic  [MAX_GROUPS-1:0]        merge_mask,
  input  logic  [MAX_GROUPS-1:0]        fwd_mask,
  input  logic  [MAX_GROUPS-1:0]        store_mask,
  input  acc_cmd_t                      cmd,
  input  logic                          rd_bank,
  input  logic [$clog2(SPM_BYTES)-1:0]  w_addr,
  input  logic                          spm_we,
  input  logic [7:0]                    spm_pe,
  input  logic                          spm_bank,
  input  logic [$clog2(SPM_BYTES/4)-1:0] spm_waddr,
  input  logic [EXT_DW-1:0]             spm_wdata,
  input  logic                          rd_en,
  input  logic [4:0]                    rd_group,
  input  logic [ACC_AW-1:0]             rd_addr,
  input  logic [$clog2(GC)-1:0]         rd_lane,
  output psum_t                         rd_data
);

  localparam int unsigned NGR = ROWS / GR;
  localparam int unsigned NGC = COLS / GC;
  localparam int unsigned NG  = NGR * NGC;

  psum_t [NGR-1:0][NGC-1:0][GR-1:0] chain_out;
  psum_t [NGR-1:0][NGC-1:0][GC-1:0] fwd_out;
  psum_t [NG-1:0]                   rd_data_g;

  for (genvar gr = 0; gr < NGR; gr++) begin : g_gr
    for (genvar gc = 0; gc < NGC; gc++) begin : g_gc
      localparam int unsigned G = gr*NGC + gc;
      psum_t [GR-1:0]    chain_in;
      psum_t [GC-1:0]    fwd_in;
      logic [GR*GC-1:0]  we;
      acc_cmd_t          gcmd;

      if (gc > 0) begin : g_chain
        assign chain_in = chain_out[gr][gc-1];
      end else begin : g_nochain
        assign chain_in = '0;
      end
      if (gr < NGR-1) begin : g_fwd
        assign fwd_in = fwd_out[gr+1][gc];
      end else begin : g_nofwd
        assign fwd_in = '0;
      end
      for (genvar k = 0; k < GR*GC; k++) begin : g_we
        assign we[k] = spm_we && (spm_pe == 8'((gr*GR + k/GC)*COLS + gc*GC + k%GC));
      end
      always_comb begin
        gcmd       = cmd;
        gcmd.valid = cmd.valid && store_mask[G];
      end

      lup_pe_group #(.SPM_BYTES(SPM_BYTES), .ACC_DEPTH(ACC_DEPTH)) u_group (
        .clk, .rst_n, .mode,
        .x(x[gr*GR +: GR]), .pad(pad[gr*GR +: GR]),
        .merge_en(merge_mask[G]), .chain_in, .chain_out(chain_out[gr][gc]),
        .fwd_en(fwd_mask[G]), .fwd_in, .fwd_out(fwd_out[gr][gc]),
        .cmd(gcmd), .rd_bank, .w_addr,
        .spm_we(we), .spm_bank, .spm_waddr, .spm_wdata,
        .rd_en(rd_en && rd_group == 5'(G)), .rd_addr, .rd_lane,
        .rd_data(rd_data_g[G])
      );
    end
  end

  // the drain read completes one cycle after rd_en: remember the group
  logic [4:0] rd_group_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_group_q <= '0;
    else if (rd_en) rd_group_q <= rd_group;
  end
  assign rd_data = (rd_group_q < 5'(NG)) ? rd_data_g[rd_group_q] : psum_t'(0);

endmodule
