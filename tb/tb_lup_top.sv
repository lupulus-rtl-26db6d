// tb_lup_top: end-to-end test of the accelerator at its default size
// (15 x 12 PEs, 20 groups of 3x3).
//
// One instruction program runs three layers through the whole chip, with the
// data and weights fetched from a behavioural external memory:
//   1. 3x3 convolution, stride 1, one pixel of zero padding on every side:
//      2 input channels of 6 x 10, four kernels on the four groups of group
//      row 0 (one output row and one input channel per pass, the three image
//      rows routed one-to-many by the mesh, missing rows fed as zeros).
//      While it computes, the data of layer 2 is fetched into the other
//      buffer banks (double buffering).
//   2. 5x5 convolution, stride 2, on a 7 x 11 image: the kernel rows span
//      two groups (horizontal merge, sixth tap zero) and the kernel's rows
//      3-4 sit in group row 1 and are forwarded up into group row 0.
//   3. 1x1 convolution: 15 channels x 8 pixels, 12 kernels, one per PE
//      column; each group row adds the column sums of the row below, so
//      every column sums all 15 channels.
// Accumulator contents are drained through the output port (with random
// back-pressure) and compared with results computed here from the same
// random data. It also checks that a compute pass takes n_cols + 7 cycles
// from its start pulse to its done pulse (one column per cycle) and counts how often each mechanism occurred.
`timescale 1ns/1ps
module tb_lup_top;
  import lup_pkg::*;

  localparam int ROWS = 15, COLS = 12, NGC = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic               instr_valid, instr_ready;
  instr_t             instr;
  logic               ibf_req_valid, ibf_req_ready, ibf_resp_valid;
  logic [EXT_AW-1:0]  ibf_req_addr;
  logic [EXT_DW-1:0]  ibf_resp_data;
  logic               spf_req_valid, spf_req_ready, spf_resp_valid;
  logic [EXT_AW-1:0]  spf_req_addr;
  logic [EXT_DW-1:0]  spf_resp_data;
  logic               out_valid, out_ready, out_last;
  psum_t              out_data;
  logic [3:0]         running;

  lup_top dut (.*);

  tb_lup_extmem #(.BYTES(8192), .LAT(3)) u_mem (
    .clk,
    .a_req_valid(ibf_req_valid), .a_req_ready(ibf_req_ready), .a_req_addr(ibf_req_addr),
    .a_resp_valid(ibf_resp_valid), .a_resp_data(ibf_resp_data),
    .b_req_valid(spf_req_valid), .b_req_ready(spf_req_ready), .b_req_addr(spf_req_addr),
    .b_resp_valid(spf_resp_valid), .b_resp_data(spf_resp_data));

  int checks = 0, failures = 0;

  // ---------------- instruction program ----------------
  instr_t prog [4096];
  int     n_prog = 0, pc = 0;

  function automatic void emit(op_e op, logic [11:0] arg, logic [31:0] data);
    prog[n_prog] = '{op: op, arg: arg, data: data};
    n_prog++;
  endfunction
  function automatic void set(logic [11:0] r, int v); emit(OP_SET, r, v); endfunction

  assign instr_valid = rst_n && (pc < n_prog);
  assign instr       = prog[pc < 4096 ? pc : 0];
  always @(posedge clk) if (instr_valid && instr_ready) pc <= pc + 1;

  // ---------------- output collection ----------------
  int out_q[$];
  int n_last = 0;
  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (out_valid && out_ready) begin
      out_q.push_back(int'(out_data));
      if (out_last) n_last++;
    end
  end

  // expected words (chk = 0: word never written, not compared)
  int exp_q[$];
  bit chk_q[$];

  // ---------------- data ----------------
  int I1 [2][6][10];  int W1 [4][2][3][3];
  int I2 [7][11];     int W2 [5][5];
  int I3 [15][8];     int W3 [12][15];

  function automatic int r8(); return int'($urandom_range(0, 255)) - 128; endfunction
  function automatic int wrap16(int v); return int'(shortint'(v)); endfunction

  // ---------------- mechanism counters ----------------
  int n_conv_pass = 0, n_pw_pass = 0, n_merge = 0, n_fwd = 0, n_pad_col = 0, n_zero_row = 0;
  int n_stride_skip = 0, n_overlap = 0, n_swap = 0, n_stall = 0, n_out_bp = 0, n_fetch_bp = 0;
  int pass_start = 0, n_cycle_checks = 0;
  int cyc = 0;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (dut.start[U_GRID]) begin
      if (dut.grid_cfg.mode == MODE_CONV) n_conv_pass++; else n_pw_pass++;
      pass_start = cyc;
    end
    if (dut.unit_done[U_GRID]) begin
      checks++;
      if (cyc - pass_start != int'(dut.act_cfg.n_cols) + 7) begin
        failures++;
        $display("FAIL pass length %0d cycles, expected %0d", cyc - pass_start, int'(dut.act_cfg.n_cols) + 7);
      end
    end
    if (dut.cmd.valid && dut.act_cfg.merge_mask != 0) n_merge++;
    if (dut.cmd.valid && dut.act_cfg.fwd_mask != 0)   n_fwd++;
    if (dut.u_gridctrl.busy && dut.u_gridctrl.state == dut.u_gridctrl.S_RUN && dut.grid_pad) n_pad_col++;
    if (dut.u_gridctrl.busy && dut.pad[0] && dut.x[0] == 0 && dut.act_cfg.row_sel[0] == ZERO_ROW) n_zero_row++;
    if (dut.u_gridctrl.state == dut.u_gridctrl.S_RUN && dut.u_gridctrl.in_chain &&
        dut.u_gridctrl.phase != 0) n_stride_skip++;
    if ((running[U_IBF] || running[U_SPF]) && running[U_GRID]) n_overlap++;
    if (instr_valid && instr_ready && instr.op == OP_SWAP) n_swap++;
    if (dut.u_gctrl.stall) n_stall++;
    if (out_valid && !out_ready) n_out_bp++;
    if (ibf_req_valid && !ibf_req_ready) n_fetch_bp++;
  end

  function automatic void put_w(int pe, int word, int b, int v);
    u_mem.mem[pe*4 + b + word] = 8'(v);
  endfunction

  // ---------------- program and expected results ----------------
  initial begin
    #1;  // after the memory model has cleared its array
    // layer 1 data: rows of 24 bytes, channel ch at byte 12*ch
    for (int ch = 0; ch < 2; ch++) for (int r = 0; r < 6; r++) for (int x = 0; x < 10; x++) begin
      I1[ch][r][x] = r8(); u_mem.mem[r*24 + ch*12 + x] = 8'(I1[ch][r][x]);
    end
    for (int k = 0; k < 4; k++) for (int ch = 0; ch < 2; ch++) for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) W1[k][ch][r][c] = r8();
    // layer 1 weights at 0x1000: one word per PE, byte ch = channel ch
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++)
      for (int ch = 0; ch < 2; ch++)
        u_mem.mem[32'h1000 + 4*(i*COLS + j) + ch] = (i < 3) ? 8'(W1[j/3][ch][i][j%3]) : 8'h00;
    // layer 2 data at 0x800 (rows of 12 bytes) and weights at 0x1400
    for (int r = 0; r < 7; r++) for (int x = 0; x < 11; x++) begin
      I2[r][x] = r8(); u_mem.mem[32'h800 + r*12 + x] = 8'(I2[r][x]);
    end
    for (int r = 0; r < 5; r++) for (int t = 0; t < 5; t++) W2[r][t] = r8();
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++)
      u_mem.mem[32'h1400 + 4*(i*COLS + j)] = (i < 5 && j < 5) ? 8'(W2[i][j]) : 8'h00;
    // layer 3 data at 0xA00 (15 channels x 8 pixels) and weights at 0x1800
    for (int r = 0; r < 15; r++) for (int p = 0; p < 8; p++) begin
      I3[r][p] = r8(); u_mem.mem[32'hA00 + r*8 + p] = 8'(I3[r][p]);
    end
    for (int k = 0; k < 12; k++) for (int r = 0; r < 15; r++) W3[k][r] = r8();
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++)
      u_mem.mem[32'h1800 + 4*(i*COLS + j)] = 8'(W3[j][i]);

    // ---- layer 1: fetch, swap, prefetch layer 2, compute ----
    set(R_IBF_BASE, 0); set(R_IBF_STRIDE, 24); set(R_IBF_NROWS, 6); set(R_IBF_WPR, 6);
    set(R_IBF_FROW, 0); set(R_IBF_DWORD, 0);
    set(R_SPF_BASE, 'h1000); set(R_SPF_FPE, 0); set(R_SPF_NPE, 180); set(R_SPF_WPP, 1); set(R_SPF_DWORD, 0);
    emit(OP_START, 12'((1 << U_IBF) | (1 << U_SPF)), 0);
    emit(OP_WAIT,  12'((1 << U_IBF) | (1 << U_SPF)), 0);
    emit(OP_SWAP, 12'b11, 0);
    set(R_IBF_BASE, 'h800); set(R_IBF_STRIDE, 12); set(R_IBF_NROWS, 7); set(R_IBF_WPR, 3);
    set(R_SPF_BASE, 'h1400); set(R_SPF_DWORD, 1);
    emit(OP_START, 12'((1 << U_IBF) | (1 << U_SPF)), 0);
    set(R_G_MODE, MODE_CONV); set(R_G_NCOLS, 12); set(R_G_PADL, 1); set(R_G_IMGW, 10);
    set(R_G_CHAIN, 3); set(R_G_STRIDE, 1); set(R_G_NOUT, 10);
    set(R_G_MERGE, 0); set(R_G_FWD, 0); set(R_G_STORE, 'hF);
    for (int r = 3; r < 16; r++) set(R_G_ROWSEL + 12'(r), ZERO_ROW);
    for (int i = 0; i < 6; i++) for (int ch = 0; ch < 2; ch++) begin
      for (int r = 0; r < 3; r++) set(R_G_ROWSEL + 12'(r), (i-1+r >= 0 && i-1+r < 6) ? i-1+r : ZERO_ROW);
      set(R_G_IBASE, 12*ch); set(R_G_WADDR, ch); set(R_G_ABASE, 4*i); set(R_G_AFIRST, ch == 0);
      emit(OP_START, 12'(1 << U_GRID), 0);
      emit(OP_WAIT,  12'(1 << U_GRID), 0);
    end
    for (int g = 0; g < 4; g++) begin
      set(R_D_GROUP, g); set(R_D_BASE, 0); set(R_D_COUNT, 72);
      emit(OP_START, 12'(1 << U_DRAIN), 0);
      emit(OP_WAIT,  12'(1 << U_DRAIN), 0);
      for (int k = 0; k < 72; k++) begin
        int i, j, s;
        i = k / 12; j = k % 12; s = 0;
        if (j < 10) begin
          for (int ch = 0; ch < 2; ch++) for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) begin
            int y, x;
            y = i - 1 + r; x = j - 1 + c;
            if (y >= 0 && y < 6 && x >= 0 && x < 10) s += W1[g][ch][r][c] * I1[ch][y][x];
          end
        end
        exp_q.push_back(wrap16(s)); chk_q.push_back(j < 10);
      end
    end

    // ---- layer 2: 5x5, stride 2, merged groups and upward forwarding ----
    emit(OP_WAIT, 12'((1 << U_IBF) | (1 << U_SPF)), 0);
    emit(OP_SWAP, 12'b11, 0);
    set(R_G_NCOLS, 12); set(R_G_PADL, 0); set(R_G_IMGW, 11); set(R_G_IBASE, 0);
    set(R_G_CHAIN, 6); set(R_G_STRIDE, 2); set(R_G_NOUT, 4); set(R_G_WADDR, 4); set(R_G_AFIRST, 1);
    set(R_G_MERGE, (1 << 1) | (1 << 5)); set(R_G_FWD, 1 << 1); set(R_G_STORE, 1 << 1);
    for (int oi = 0; oi < 2; oi++) begin
      for (int r = 0; r < 6; r++) set(R_G_ROWSEL + 12'(r), r < 5 ? 2*oi + r : ZERO_ROW);
      set(R_G_ABASE, 2*oi);
      emit(OP_START, 12'(1 << U_GRID), 0);
      emit(OP_WAIT,  12'(1 << U_GRID), 0);
    end
    set(R_D_GROUP, 1); set(R_D_BASE, 0); set(R_D_COUNT, 12);
    emit(OP_START, 12'(1 << U_DRAIN), 0);
    for (int k = 0; k < 12; k++) begin
      int oi, j, s;
      oi = k / 6; j = k % 6; s = 0;
      if (j < 4) for (int r = 0; r < 5; r++) for (int t = 0; t < 5; t++) s += W2[r][t] * I2[2*oi + r][2*j + t];
      exp_q.push_back(wrap16(s)); chk_q.push_back(j < 4);
    end

    // ---- layer 3: 1x1 kernels over 15 channels ----
    set(R_IBF_BASE, 'hA00); set(R_IBF_STRIDE, 8); set(R_IBF_NROWS, 15); set(R_IBF_WPR, 2);
    set(R_SPF_BASE, 'h1800); set(R_SPF_DWORD, 2);
    emit(OP_START, 12'((1 << U_IBF) | (1 << U_SPF)), 0);
    emit(OP_WAIT,  12'((1 << U_IBF) | (1 << U_SPF) | (1 << U_DRAIN)), 0);
    emit(OP_SWAP, 12'b11, 0);
    set(R_G_MODE, MODE_PW); set(R_G_NCOLS, 8); set(R_G_PADL, 0); set(R_G_IMGW, 8); set(R_G_IBASE, 0);
    set(R_G_CHAIN, 1); set(R_G_STRIDE, 1); set(R_G_NOUT, 8); set(R_G_WADDR, 8); set(R_G_ABASE, 0);
    set(R_G_AFIRST, 1); set(R_G_MERGE, 0); set(R_G_FWD, 'hFFFF); set(R_G_STORE, 'hF);
    for (int r = 0; r < 15; r++) set(R_G_ROWSEL + 12'(r), r);
    emit(OP_START, 12'(1 << U_GRID), 0);
    for (int g = 0; g < 4; g++) begin
      set(R_D_GROUP, g); set(R_D_BASE, 0); set(R_D_COUNT, 24);
      emit(OP_START, 12'(1 << U_DRAIN), 0);
      for (int k = 0; k < 24; k++) begin
        int p, kk, s;
        p = k / 3; kk = 3*g + k % 3; s = 0;
        for (int r = 0; r < 15; r++) s += W3[kk][r] * I3[r][p];
        exp_q.push_back(wrap16(s)); chk_q.push_back(1'b1);
      end
    end
    emit(OP_WAIT, 12'hF, 0);

    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    wait (pc == n_prog && running == 0 && out_q.size() == exp_q.size());
    repeat (10) @(posedge clk);

    checks++;
    if (out_q.size() != exp_q.size()) begin
      failures++; $display("FAIL got %0d words, expected %0d", out_q.size(), exp_q.size());
    end
    for (int k = 0; k < exp_q.size() && k < out_q.size(); k++) if (chk_q[k]) begin
      checks++;
      if (out_q[k] != exp_q[k]) begin
        failures++;
        if (failures < 20) $display("FAIL word %0d: got %0d expected %0d", k, out_q[k], exp_q[k]);
      end
    end
    checks++;
    if (n_last != 9) begin failures++; $display("FAIL %0d drains ended, expected 9", n_last); end

    $display("mechanisms: conv_pass=%0d pw_pass=%0d merge=%0d fwd=%0d pad_col=%0d zero_row=%0d stride_skip=%0d",
             n_conv_pass, n_pw_pass, n_merge, n_fwd, n_pad_col, n_zero_row, n_stride_skip);
    $display("            fetch_compute_overlap=%0d swap=%0d instr_stall=%0d out_backpressure=%0d fetch_backpressure=%0d",
             n_overlap, n_swap, n_stall, n_out_bp, n_fetch_bp);
    begin
      int m [12];
      m = '{n_conv_pass, n_pw_pass, n_merge, n_fwd, n_pad_col, n_zero_row, n_stride_skip,
                     n_overlap, n_swap, n_stall, n_out_bp, n_fetch_bp};
      for (int i = 0; i < 12; i++) begin
        checks++;
        if (m[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
    end
    $display("cycles=%0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired (pc=%0d of %0d, %0d of %0d words)", pc, n_prog, out_q.size(), exp_q.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
