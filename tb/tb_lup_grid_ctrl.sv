// tb_lup_grid_ctrl: unit test of the grid controller.
//   A. CONV pass with left padding, a buffer offset and stride 2: checks the
//      buffer address of every column, the padding flag one cycle later, every
//      accumulate command (cycle, word, lane) and the pass length.
//   B. PW pass: every column gives one all-lane command.
//   C. Drain of 7 words with random back-pressure against a fake accumulator
//      that returns f(group, word, lane) one cycle after the read.
// Expected values come from the rules in the controller's description:
// column c issued in cycle start+1+c, its command four cycles later, the
// pass done n_cols+7 cycles after start.
`timescale 1ns/1ps
module tb_lup_grid_ctrl;
  import lup_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  grid_cfg_t cfg_in, cfg; logic start, busy, done;
  drain_cfg_t dcfg_in; logic drain_start, drain_busy, drain_done;
  logic ibuf_re; logic [IB_AW-1:0] ibuf_raddr; logic pad;
  acc_cmd_t cmd; logic rd_en; logic [4:0] rd_group; logic [ACC_AW-1:0] rd_addr; logic [1:0] rd_lane;
  psum_t rd_data; logic out_valid, out_ready, out_last; psum_t out_data;
  lup_grid_ctrl dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int f(int g, int a, int l); return (g * 1000 + a * 10 + l) & 16'h7fff; endfunction
  always @(posedge clk) if (rd_en) rd_data <= psum_t'(f(rd_group, rd_addr, rd_lane));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  task automatic run(mode_e m, int n_cols, int padl, int imgw, int ibase, int L, int stride, int n_out, int abase);
    int t0, n_cmd, k;
    cfg_in = '0;
    cfg_in.mode = m; cfg_in.n_cols = 9'(n_cols); cfg_in.pad_left = 8'(padl); cfg_in.img_w = 9'(imgw);
    cfg_in.ibuf_base = 8'(ibase); cfg_in.chain_len = 5'(L); cfg_in.stride = 4'(stride);
    cfg_in.n_out = 10'(n_out); cfg_in.acc_base = ACC_AW'(abase); cfg_in.acc_first = 1;
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0; cfg_in = '0;   // the pass must use its own copy
    n_cmd = 0; k = 0;
    for (int i = 0; i < n_cols + 10; i++) begin
      int c = cyc - t0 - 1;       // column issued in this cycle
      int jc = c - 4 - (L - 1);   // output whose command is due in this cycle
      if (c >= 0 && c < n_cols) begin
        chk(ibuf_re && ibuf_raddr == 8'(ibase + c - padl), $sformatf("column %0d address %0d", c, ibuf_raddr));
      end
      if (c >= 1 && c <= n_cols) begin
        chk(pad == ((c-1) < padl || (c-1) >= padl + imgw), $sformatf("pad of column %0d", c-1));
      end
      if (jc >= 0 && jc % stride == 0 && jc / stride < n_out && c - 4 < n_cols) begin
        k = jc / stride;
        chk(cmd.valid && cmd.first, $sformatf("command for output %0d missing", jc));
        if (m == MODE_CONV)
          chk(cmd.addr == ACC_AW'(abase + k/3) && cmd.lane == 3'(1 << (k%3)), $sformatf("cmd %0d addr/lane %0d/%b", k, cmd.addr, cmd.lane));
        else
          chk(cmd.addr == ACC_AW'(abase + k) && cmd.lane == 3'b111, $sformatf("PW cmd %0d addr/lane %0d/%b", k, cmd.addr, cmd.lane));
      end else begin
        chk(!cmd.valid, $sformatf("unexpected command in cycle %0d", cyc - t0));
      end
      if (cmd.valid) n_cmd++;
      if (done) chk(cyc - t0 == n_cols + 7, $sformatf("pass took %0d cycles", cyc - t0));
      @(negedge clk);
    end
    chk(n_cmd == n_out, $sformatf("%0d commands, expected %0d", n_cmd, n_out));
    chk(!busy, "still busy");
  endtask

  initial begin
    cfg_in = '0; start = 0; dcfg_in = '0; drain_start = 0; out_ready = 0; rd_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(MODE_CONV, 12, 1, 10, 20, 3, 2, 5, 7);
    run(MODE_PW, 5, 0, 5, 0, 1, 1, 5, 30);
    // ---- drain ----
    dcfg_in.group = 3; dcfg_in.base = 2; dcfg_in.count = 7;
    @(negedge clk); drain_start = 1;
    @(negedge clk); drain_start = 0; dcfg_in = '0;
    begin
      int k = 0;
      for (int i = 0; i < 200 && k < 7; i++) begin
        out_ready = ($urandom_range(0, 2) != 0);
        @(posedge clk);
        if (out_valid && out_ready) begin
          chk(out_data == psum_t'(f(3, 2 + k/3, k%3)), $sformatf("drain word %0d = %0d", k, out_data));
          chk(out_last == (k == 6), $sformatf("out_last at word %0d", k));
          k++;
        end
        @(negedge clk);
      end
      chk(k == 7, "drain incomplete");
    end
    repeat (3) @(negedge clk);
    chk(!drain_busy && !out_valid, "drain did not end");
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
