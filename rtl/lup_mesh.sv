// lup_mesh: mesh network between the input buffers and the PE rows.
//
// PE row i receives the byte read from input buffer row_sel[i]. Several PE
// rows may select the same buffer (one-to-many, as in the 3x3-kernel mapping
// where one image row feeds the same kernel row of several groups) or each a
// different one (one-to-one, as in the 1x1-kernel mapping). The code ZERO_ROW
// (or any index >= ROWS) feeds zeros, which gives vertical zero padding.
// The padding flag of the column travels with the data. Outputs are
// registered: one cycle from buffer read data to PE input.
// The register stage and the zero code are this design's choices; the paper
// gives the function, not the structure, of the network.
module lup_mesh
  import lup_pkg::*;
#(
  parameter int unsigned ROWS = 15
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  data_t [ROWS-1:0]           buf_data,
  input  logic                       pad_in,
  input  logic  [MAX_ROWS-1:0][3:0]  row_sel,
  output data_t [ROWS-1:0]           x,
  output logic  [ROWS-1:0]           pad
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x   <= '0;
      pad <= '1;
    end else begin
      for (int i = 0; i < ROWS; i++) begin
        if (row_sel[i] < 4'(ROWS)) begin
          x[i]   <= buf_data[row_sel[i]];
          pad[i] <= pad_in;
        end else begin
          x[i]   <= '0;
          pad[i] <= 1'b1;
        end
      end
    end
  end

endmodule
