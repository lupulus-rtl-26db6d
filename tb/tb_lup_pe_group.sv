// tb_lup_pe_group: unit test of one 3x3 PE group with its accumulator.
// Loads two weight sets into SPM bank 1, then runs three passes, driving the
// PE inputs and accumulate commands with the grid's timing (the command for
// an output arrives two cycles after the last pixel it needs):
//   A. MODE_CONV, 3x3 kernel: out[j] = sum_r sum_c w[r][c] * x_r[j+c];
//   B. MODE_CONV with merge_en and constant chain_in[r] from the left:
//      out[j] = A-formula + sum_r chain_in[r];
//   C. MODE_PW: lane c of pixel p = sum_r v[r][c] * x_r[p] + fwd_in[c].
// Results are read back through the drain port and compared with values
// computed here.
`timescale 1ns/1ps
module tb_lup_pe_group;
  import lup_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  mode_e mode; data_t [GR-1:0] x; logic [GR-1:0] pad;
  logic merge_en; psum_t [GR-1:0] chain_in, chain_out;
  logic fwd_en; psum_t [GC-1:0] fwd_in, fwd_out;
  acc_cmd_t cmd; logic rd_bank; logic [4:0] w_addr;
  logic [8:0] spm_we; logic spm_bank; logic [2:0] spm_waddr; logic [31:0] spm_wdata;
  logic rd_en; logic [ACC_AW-1:0] rd_addr; logic [1:0] rd_lane; psum_t rd_data;
  lup_pe_group dut (.*);

  int checks = 0, failures = 0;
  int wA [3][3], wP [3][3];
  int xs [3][16];
  int expv [64][3];
  bit expd [64][3];

  task automatic run_pass(mode_e m, int n_in, int base, bit merge, int chain_k, int fwd_k);
    int L = (m == MODE_CONV) ? 3 : 1;
    int n_out = n_in - L + 1;
    int wa = (m == MODE_CONV) ? 0 : 4;
    for (int r = 0; r < 3; r++) for (int i = 0; i < n_in; i++) xs[r][i] = int'(data_t'($urandom()));
    for (int j = 0; j < n_out; j++) begin
      if (m == MODE_CONV) begin
        int s = 0;
        for (int r = 0; r < 3; r++) begin
          for (int c = 0; c < 3; c++) s += wA[r][c] * xs[r][j+c];
          if (merge) s += chain_k + r;
        end
        expv[base + j/3][j%3] = int'(shortint'(s)); expd[base + j/3][j%3] = 1;
      end else begin
        for (int c = 0; c < 3; c++) begin
          int s = fwd_k + c;
          for (int r = 0; r < 3; r++) s += wP[r][c] * xs[r][j];
          expv[base + j][c] = int'(shortint'(s)); expd[base + j][c] = 1;
        end
      end
    end
    mode = m; merge_en = merge; fwd_en = (m == MODE_PW); w_addr = 5'(wa);
    for (int r = 0; r < 3; r++) chain_in[r] = psum_t'(chain_k + r);
    for (int c = 0; c < 3; c++) fwd_in[c] = psum_t'(fwd_k + c);
    for (int cyc = 0; cyc < n_in + 4; cyc++) begin
      int j;
      @(negedge clk);
      for (int r = 0; r < 3; r++) begin x[r] = (cyc < n_in) ? data_t'(xs[r][cyc]) : '0; pad[r] = 0; end
      j = cyc - (L - 1) - 2;
      cmd = '0;
      if (j >= 0 && j < n_out) begin
        cmd.valid = 1; cmd.first = 1;
        cmd.addr  = ACC_AW'((m == MODE_CONV) ? base + j/3 : base + j);
        cmd.lane  = (m == MODE_CONV) ? 3'(1 << (j%3)) : 3'b111;
      end
    end
    @(negedge clk); cmd = '0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    mode = MODE_CONV; x = '0; pad = '0; merge_en = 0; chain_in = '0; fwd_en = 0; fwd_in = '0; cmd = '0;
    rd_bank = 1; w_addr = 0; spm_we = '0; spm_bank = 1; spm_waddr = 0; spm_wdata = 0;
    rd_en = 0; rd_addr = 0; rd_lane = 0;
    for (int a = 0; a < 64; a++) for (int l = 0; l < 3; l++) expd[a][l] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) begin
      wA[r][c] = int'(data_t'($urandom())); wP[r][c] = int'(data_t'($urandom()));
      @(negedge clk);
      spm_we = 9'(1 << (r*3 + c)); spm_bank = 1; spm_waddr = 0; spm_wdata = {24'h0, 8'(wA[r][c])};
      @(negedge clk);
      spm_waddr = 1; spm_wdata = {24'h0, 8'(wP[r][c])};
    end
    @(negedge clk); spm_we = '0;
    run_pass(MODE_CONV, 14, 0, 0, 0, 0);
    run_pass(MODE_CONV, 14, 8, 1, 1000, 0);
    run_pass(MODE_PW, 10, 16, 0, 0, -500);
    for (int a = 0; a < 32; a++) for (int l = 0; l < 3; l++) if (expd[a][l]) begin
      rd_en = 1; rd_addr = ACC_AW'(a); rd_lane = 2'(l);
      @(negedge clk); rd_en = 0;
      @(negedge clk);
      checks++;
      if (int'(rd_data) != expv[a][l]) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d lane %0d got %0d expected %0d", a, l, rd_data, expv[a][l]);
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
