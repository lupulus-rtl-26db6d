// tb_lup_pe: unit test of one processing element.
// Fills both SPM banks with random words, then drives random pixels, padding
// flags, partial sums, banks and weight addresses for 400 cycles and compares
// the output with a two-stage model kept here (product registered, then sum
// registered): psum_out(t+2) = w(t)*x(t) + psum_in(t+1).
`timescale 1ns/1ps
module tb_lup_pe;
  import lup_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  data_t x; logic pad; psum_t psum_in, psum_out;
  logic rd_bank; logic [4:0] w_addr;
  logic spm_we, spm_bank; logic [2:0] spm_waddr; logic [31:0] spm_wdata;
  lup_pe dut (.*);
  logic [31:0] ref_spm [2][8];
  int checks = 0, failures = 0;
  int m_prod = 0, m_out = 0;

  initial begin
    x = 0; pad = 0; psum_in = 0; rd_bank = 0; w_addr = 0; spm_we = 0; spm_bank = 0; spm_waddr = 0; spm_wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 2; b++) for (int a = 0; a < 8; a++) begin
      @(negedge clk);
      spm_we = 1; spm_bank = b[0]; spm_waddr = a[2:0]; spm_wdata = $urandom(); ref_spm[b][a] = spm_wdata;
    end
    @(negedge clk); spm_we = 0;
    repeat (2) @(negedge clk);
    for (int t = 0; t < 400; t++) begin
      x = data_t'($urandom()); pad = ($urandom_range(0, 7) == 0); psum_in = psum_t'($urandom());
      rd_bank = $urandom_range(0, 1); w_addr = 5'($urandom());
      @(posedge clk);
      begin
        int w, xe;
        w  = int'(data_t'(ref_spm[rd_bank][w_addr[4:2]][8*w_addr[1:0] +: 8]));
        xe = pad ? 0 : int'(x);
        m_out  = int'(shortint'(m_prod + int'(psum_in)));
        m_prod = int'(shortint'(w * xe));
      end
      @(negedge clk);
      if (t >= 2) begin
        checks++;
        if (int'(psum_out) != m_out) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d got %0d expected %0d", t, psum_out, m_out);
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
