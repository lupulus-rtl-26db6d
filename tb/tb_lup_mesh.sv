// tb_lup_mesh: unit test of the mesh network.
// Random buffer bytes, random routing (including the zero code and
// one-to-many routings) and padding flags; each output row is checked one
// cycle later against the selected buffer (or zero and pad set).
`timescale 1ns/1ps
module tb_lup_mesh;
  import lup_pkg::*;
  localparam int ROWS = 15;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  data_t [ROWS-1:0] buf_data; logic pad_in; logic [MAX_ROWS-1:0][3:0] row_sel;
  data_t [ROWS-1:0] x; logic [ROWS-1:0] pad;
  lup_mesh #(.ROWS(ROWS)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    buf_data = '0; pad_in = 0; row_sel = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      data_t [ROWS-1:0] b; logic p; logic [MAX_ROWS-1:0][3:0] s;
      @(negedge clk);
      for (int i = 0; i < ROWS; i++) buf_data[i] = data_t'($urandom());
      for (int i = 0; i < MAX_ROWS; i++) row_sel[i] = ($urandom_range(0, 5) == 0) ? ZERO_ROW : 4'($urandom_range(0, ROWS-1));
      if (t % 7 == 0) for (int i = 0; i < MAX_ROWS; i++) row_sel[i] = 4'(i % 3);
      pad_in = ($urandom_range(0, 3) == 0);
      b = buf_data; p = pad_in; s = row_sel;
      @(negedge clk);
      for (int i = 0; i < ROWS; i++) begin
        checks++;
        if (s[i] == ZERO_ROW) begin
          if (x[i] != 0 || pad[i] != 1'b1) begin failures++; $display("FAIL zero row %0d", i); end
        end else if (x[i] != b[s[i]] || pad[i] != p) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d sel %0d got %0d expected %0d", i, s[i], x[i], b[s[i]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
