// lup_pe_group: a 3x3 group of PEs with its partial-sum mux network and its
// accumulator.
//
// Row r of the group receives pixel x[r] (and its padding flag), broadcast to
// the three PEs of the row. The small mux network in front of each PE's
// partial-sum input selects:
//     column 0 : chain_in[r] from the last PE of the group on the left when the
//                group is merged with it (merge_en, MODE_CONV), else zero;
//     columns 1, 2 : the left neighbour's partial sum in MODE_CONV, zero in
//                MODE_PW (every PE then works for its own 1x1 kernel).
// chain_out[r] exposes the last PE of each row so that a kernel row longer than
// three taps continues into the next group. The accumulator adds the rows of
// the group, plus the forwarded sums of the group below when fwd_en.
// The group size is the published 3x3; the mux selections are this design's
// reading of "small mux networks share the partial sums between the PEs
// before reaching the accumulators and allow for different groups of PEs to be
// merged".
// SPM writes arrive with a one-hot PE enable (row-major, r*GC + c).
module lup_pe_group
  import lup_pkg::*;
#(
  parameter int unsigned SPM_BYTES = 32,
  parameter int unsigned ACC_DEPTH = 341
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  mode_e                         mode,
  input  data_t [GR-1:0]                x,
  input  logic  [GR-1:0]                pad,
  input  logic                          merge_en,
  input  psum_t [GR-1:0]                chain_in,
  output psum_t [GR-1:0]                chain_out,
  input  logic                          fwd_en,
  input  psum_t [GC-1:0]                fwd_in,
  output psum_t [GC-1:0]                fwd_out,
  input  acc_cmd_t                      cmd,
  input  logic                          rd_bank,
  input  logic [$clog2(SPM_BYTES)-1:0]  w_addr,
  input  logic [GR*GC-1:0]              spm_we,
  input  logic                          spm_bank,
  input  logic [$clog2(SPM_BYTES/4)-1:0] spm_waddr,
  input  logic [EXT_DW-1:0]             spm_wdata,
  input  logic                          rd_en,
  input  logic [ACC_AW-1:0]             rd_addr,
  input  logic [$clog2(GC)-1:0]         rd_lane,
  output psum_t                         rd_data
);

  psum_t [GR-1:0][GC-1:0] pin, pout;

  for (genvar r = 0; r < GR; r++) begin : g_row
    for (genvar c = 0; c < GC; c++) begin : g_col
      if (c == 0) begin : g_first
        assign pin[r][c] = (mode == MODE_CONV && merge_en) ? chain_in[r] : psum_t'(0);
      end else begin : g_next
        assign pin[r][c] = (mode == MODE_CONV) ? pout[r][c-1] : psum_t'(0);
      end
      lup_pe #(.SPM_BYTES(SPM_BYTES), .SPM_BANKS(2)) u_pe (
        .clk, .rst_n,
        .x(x[r]), .pad(pad[r]),
        .psum_in(pin[r][c]), .psum_out(pout[r][c]),
        .rd_bank, .w_addr,
        .spm_we(spm_we[r*GC+c]), .spm_bank, .spm_waddr, .spm_wdata
      );
    end
    assign chain_out[r] = pout[r][GC-1];
  end

  lup_accumulator #(.ACC_DEPTH(ACC_DEPTH)) u_acc (
    .clk, .rst_n, .mode, .psum(pout), .fwd_en, .fwd_in, .fwd_out, .cmd,
    .rd_en, .rd_addr, .rd_lane, .rd_data
  );

endmodule
