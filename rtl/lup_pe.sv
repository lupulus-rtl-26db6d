// lup_pe: one processing element (PE) of the Lupulus grid.
//
// Datapath (as drawn in the published PE detail): the weight read from the
// PE's scratch-pad memory (SPM) is multiplied by the input pixel, the product
// is registered, the incoming partial sum is added and the sum is registered
// again:
//     prod_q   <= w[w_addr] * x
//     psum_out <= prod_q + psum_in
// With the same pixel broadcast to every PE of a row and psum_in taken from the
// left neighbour, a row of L PEs holding w0..w(L-1) produces
//     sum_k w_k * x[j+k]
// two cycles after pixel x[j+L-1] was presented, i.e. a 1-D cross-correlation.
//
// SPM: 32 bytes per bank and two banks (double-buffering), written 32 bits at
// a time by the SPM fetch unit while the other bank is read. The read is
// combinational (the SPM is a small register file).
//
// PE controller: zeroes the input when `pad` marks a padding position and
// selects the bank (rd_bank) and byte (w_addr) that the grid controller names.
// The two register stages follow the published drawing; the 16-bit partial sum
// wraps on overflow (the paper gives no saturation), the byte order inside an
// SPM word (byte 0 in bits 7:0) and the reset of both registers to zero are
// this design's choices.
module lup_pe
  import lup_pkg::*;
#(
  parameter int unsigned SPM_BYTES = 32,
  parameter int unsigned SPM_BANKS = 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // pixel from the mesh network
  input  data_t                         x,
  input  logic                          pad,
  // partial sum chain
  input  psum_t                         psum_in,
  output psum_t                         psum_out,
  // weight selection (grid controller)
  input  logic [$clog2(SPM_BANKS)-1:0]  rd_bank,
  input  logic [$clog2(SPM_BYTES)-1:0]  w_addr,
  // SPM write port (SPM fetch unit)
  input  logic                          spm_we,
  input  logic [$clog2(SPM_BANKS)-1:0]  spm_bank,
  input  logic [$clog2(SPM_BYTES/4)-1:0] spm_waddr,
  input  logic [EXT_DW-1:0]             spm_wdata
);

  localparam int unsigned WORDS = SPM_BYTES / 4;

  logic [EXT_DW-1:0] spm [SPM_BANKS][WORDS];
  logic [EXT_DW-1:0] wword;
  data_t             weight;
  data_t             x_eff;
  psum_t             prod_q;

  always_ff @(posedge clk) begin
    if (spm_we) spm[spm_bank][spm_waddr] <= spm_wdata;
  end

  always_comb begin
    wword  = spm[rd_bank][w_addr[$clog2(SPM_BYTES)-1:2]];
    weight = data_t'(wword[8*w_addr[1:0] +: 8]);
    x_eff  = pad ? data_t'(0) : x;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod_q   <= '0;
      psum_out <= '0;
    end else begin
      prod_q   <= psum_t'(x_eff) * psum_t'(weight);
      psum_out <= prod_q + psum_in;
    end
  end

endmodule
