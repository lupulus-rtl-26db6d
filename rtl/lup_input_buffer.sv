// lup_input_buffer: the input SRAM of one PE row, double-buffered.
//
// BANKS banks of BYTES bytes (published: 256 B, two banks for double
// buffering). The input buffer fetch unit writes 32-bit words into one bank
// while the grid reads bytes from the other. Read: address in cycle t, byte
// out in cycle t+1 (synchronous, like an SRAM macro). Write: one word per
// cycle. Byte 0 of a word is bits 7:0 (this design's choice).
module lup_input_buffer
  import lup_pkg::*;
#(
  parameter int unsigned BYTES = 256,
  parameter int unsigned BANKS = 2
) (
  input  logic                         clk,
  input  logic                         we,
  input  logic [$clog2(BANKS)-1:0]     wbank,
  input  logic [$clog2(BYTES/4)-1:0]   waddr,
  input  logic [EXT_DW-1:0]            wdata,
  input  logic                         re,
  input  logic [$clog2(BANKS)-1:0]     rbank,
  input  logic [$clog2(BYTES)-1:0]     raddr,
  output data_t                        rdata
);

  logic [EXT_DW-1:0] mem [BANKS][BYTES/4];
  logic [EXT_DW-1:0] rword_q;
  logic [1:0]        rbyte_q;

  always_ff @(posedge clk) begin
    if (we) mem[wbank][waddr] <= wdata;
    if (re) begin
      rword_q <= mem[rbank][raddr[$clog2(BYTES)-1:2]];
      rbyte_q <= raddr[1:0];
    end
  end

  assign rdata = data_t'(rword_q[8*rbyte_q +: 8]);

endmodule
