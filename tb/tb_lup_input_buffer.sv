// tb_lup_input_buffer: unit test of one double-buffered input SRAM.
// Writes random words to both banks, then reads random bytes while writing
// the other bank and checks each byte one cycle after its address.
`timescale 1ns/1ps
module tb_lup_input_buffer;
  import lup_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  logic we, re; logic wbank, rbank; logic [5:0] waddr; logic [7:0] raddr; logic [31:0] wdata; data_t rdata;
  lup_input_buffer dut (.*);
  logic [7:0] ref_mem [2][256];
  int checks = 0, failures = 0;
  initial begin
    we = 0; re = 0; wbank = 0; rbank = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int b = 0; b < 2; b++) for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      we = 1; wbank = b[0]; waddr = a[5:0]; wdata = $urandom();
      for (int k = 0; k < 4; k++) ref_mem[b][4*a+k] = wdata[8*k +: 8];
    end
    for (int t = 0; t < 500; t++) begin
      int eb;
      @(negedge clk);
      re = 1; rbank = $urandom_range(0, 1); raddr = 8'($urandom());
      we = 1; wbank = ~rbank; waddr = 6'($urandom()); wdata = $urandom();
      eb = int'(ref_mem[rbank][raddr]);
      @(posedge clk);
      for (int k = 0; k < 4; k++) ref_mem[wbank][4*waddr+k] = wdata[8*k +: 8];
      @(negedge clk);
      we = 0; re = 0;
      checks++;
      if (int'(rdata) != int'(data_t'(8'(eb)))) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d/%0d got %0d expected %0d", rbank, raddr, rdata, data_t'(8'(eb)));
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
