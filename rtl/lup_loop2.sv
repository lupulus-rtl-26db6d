// lup_loop2: two-level loop counter used by the fetch units.
//
// Counts (outer, inner) through outer < n_outer, inner < n_inner in row-major
// order, one step per cycle in which `step` is high; `init` restarts at
// (0, 0). `last` is high while the counter stands on the final pair.
// Both counts must be at least one.
module lup_loop2 #(
  parameter int unsigned WO = 8,
  parameter int unsigned WI = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic          step,
  input  logic [WO-1:0] n_outer,
  input  logic [WI-1:0] n_inner,
  output logic [WO-1:0] outer,
  output logic [WI-1:0] inner,
  output logic          last
);

  logic inner_last;
  assign inner_last = (inner + WI'(1) >= n_inner);
  assign last       = inner_last && (outer + WO'(1) >= n_outer);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      outer <= '0;
      inner <= '0;
    end else if (init) begin
      outer <= '0;
      inner <= '0;
    end else if (step) begin
      if (inner_last) begin
        inner <= '0;
        outer <= outer + WO'(1);
      end else begin
        inner <= inner + WI'(1);
      end
    end
  end

endmodule
