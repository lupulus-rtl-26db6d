// tb_lup_accumulator: unit test of a group accumulator.
// 1. Initialises every word with `first` commands in MODE_PW.
// 2. Sends 600 random commands (random mode, lanes, forwarding, first flag,
//    partial sums), never the same lane and word twice in a row, updating a
//    reference memory here; fwd_out is checked every cycle.
// 3. Reads every word and lane through the drain port and compares.
`timescale 1ns/1ps
module tb_lup_accumulator;
  import lup_pkg::*;
  localparam int DEPTH = 341;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  mode_e mode; psum_t [GR-1:0][GC-1:0] psum; logic fwd_en; psum_t [GC-1:0] fwd_in, fwd_out;
  acc_cmd_t cmd; logic rd_en; logic [ACC_AW-1:0] rd_addr; logic [1:0] rd_lane; psum_t rd_data;
  lup_accumulator #(.ACC_DEPTH(DEPTH)) dut (.*);
  int ref_mem [GC][DEPTH];
  int checks = 0, failures = 0;
  int prev_addr = -1; logic [2:0] prev_lane = 0;

  task automatic drive_random(bit allow_first, bit force_pw, int a);
    int cs [GC];
    mode   = (force_pw || $urandom_range(0, 1)) ? MODE_PW : MODE_CONV;
    fwd_en = $urandom_range(0, 1);
    for (int r = 0; r < GR; r++) for (int c = 0; c < GC; c++) psum[r][c] = psum_t'($urandom());
    for (int c = 0; c < GC; c++) fwd_in[c] = psum_t'($urandom());
    cmd.valid = 1'b1;
    cmd.first = allow_first ? 1'b1 : ($urandom_range(0, 4) == 0);
    cmd.addr  = ACC_AW'(a);
    cmd.lane  = (mode == MODE_PW) ? 3'b111 : 3'(1 << $urandom_range(0, 2));
    for (int c = 0; c < GC; c++) begin
      cs[c] = fwd_en ? int'(fwd_in[c]) : 0;
      for (int r = 0; r < GR; r++) cs[c] += int'(psum[r][c]);
    end
    for (int c = 0; c < GC; c++) if (cmd.lane[c]) begin
      int v = (mode == MODE_PW) ? cs[c] : cs[GC-1];
      ref_mem[c][a] = int'(shortint'(cmd.first ? v : ref_mem[c][a] + v));
    end
    #0.5;
    for (int c = 0; c < GC; c++) begin
      checks++;
      if (int'(fwd_out[c]) != int'(shortint'(cs[c]))) begin failures++; $display("FAIL fwd_out[%0d]", c); end
    end
  endtask

  initial begin
    mode = MODE_PW; psum = '0; fwd_en = 0; fwd_in = '0; cmd = '0; rd_en = 0; rd_addr = 0; rd_lane = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); drive_random(1, 1, a);
    end
    for (int t = 0; t < 600; t++) begin
      int a;
      @(negedge clk);
      a = $urandom_range(0, 15);
      if (a == prev_addr) a = (a + 1) % 16;
      drive_random(0, 0, a);
      prev_addr = a;
    end
    @(negedge clk); cmd = '0;
    repeat (3) @(negedge clk);
    for (int a = 0; a < DEPTH; a++) for (int l = 0; l < GC; l++) begin
      rd_en = 1; rd_addr = ACC_AW'(a); rd_lane = 2'(l);
      @(negedge clk); rd_en = 0;
      @(negedge clk);
      checks++;
      if (int'(rd_data) != ref_mem[l][a]) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d lane %0d got %0d expected %0d", a, l, rd_data, ref_mem[l][a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
