// tb_lup_workloads: slices of the benchmark layers on the full-size
// accelerator (15 x 12 PEs, default parameters), end to end from external
// memory to the output port.
//
//   A. VGG-16 conv1_1: 224-pixel rows, 3 input channels, 3x3 kernels, one
//      pixel of padding. Twenty kernels run at once, one per PE group, and
//      all five group rows read the same three input rows through the mesh
//      (one-to-many). Output rows 0 and 1 are computed: 3 channels x 2 rows
//      = 6 passes of 226 columns, then all 20 accumulators are drained.
//   B. AlexNet conv1: 227-pixel rows, 3 input channels, one 11x11 kernel,
//      stride 4. The kernel spans 4 merged groups horizontally (12 PEs, the
//      12th weight 0) and 4 group rows vertically (11 PE rows, the 12th
//      fed with zeros), the lower group rows forwarding their sums upward.
//      The 11 image rows of each channel fill 11 input buffers, so the
//      channels are fetched one at a time into the idle bank while the
//      previous channel computes. Output row 0 (55 pixels) is drained.
// The layer shapes are those of the published networks; pixel and weight
// values are random. Results are compared with sums computed here, and
// every pass is checked to take n_cols + 7 cycles.
`timescale 1ns/1ps
module tb_lup_workloads;
  import lup_pkg::*;

  localparam int ROWS = 15, COLS = 12;
  localparam int VW = 224;                 // VGG row width
  localparam int AW = 227, AS = 228;       // AlexNet row width, row stride in memory
  localparam int V_IN = 'h0000, V_WT = 'h0800, A_IN = 'h1000, A_WT = 'h3000;

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

  tb_lup_extmem #(.BYTES(16384), .LAT(3)) u_mem (
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
  int exp_q[$];
  bit chk_q[$];

  // ---------------- data ----------------
  int VPX [3][3][VW];  int VKR [20][3][3][3];
  int APX [3][11][AW]; int AKR [3][11][11];

  function automatic int r8(); return int'($urandom_range(0, 255)) - 128; endfunction
  function automatic int wrap16(int v); return int'(shortint'(v)); endfunction

  // ---------------- pass timing ----------------
  int cyc = 0, pass_start = 0, n_pass = 0, grid_busy = 0, t_vgg = 0, t_alex = 0;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (running[U_GRID]) grid_busy++;
    if (dut.start[U_GRID]) pass_start = cyc;
    if (dut.unit_done[U_GRID]) begin
      n_pass++;
      checks++;
      if (cyc - pass_start != int'(dut.act_cfg.n_cols) + 7) begin
        failures++;
        $display("FAIL pass length %0d cycles, expected %0d", cyc - pass_start, int'(dut.act_cfg.n_cols) + 7);
      end
    end
  end

  initial begin
    #1;  // after the memory model has cleared its array
    // ---- A: VGG-16 conv1_1 data: buffer row 3*ch + y holds image row y of channel ch ----
    for (int ch = 0; ch < 3; ch++) for (int y = 0; y < 3; y++) for (int x = 0; x < VW; x++) begin
      VPX[ch][y][x] = r8(); u_mem.mem[V_IN + (3*ch + y)*VW + x] = 8'(VPX[ch][y][x]);
    end
    for (int k = 0; k < 20; k++) for (int ch = 0; ch < 3; ch++) for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) VKR[k][ch][r][c] = r8();
    // kernel k on group k; PE (i,j) holds tap (i%3, j%3) of channel ch in SPM byte ch
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) for (int ch = 0; ch < 3; ch++)
      u_mem.mem[V_WT + 4*(i*COLS + j) + ch] = 8'(VKR[(i/3)*4 + j/3][ch][i%3][j%3]);
    // ---- B: AlexNet conv1 data: channel ch, image rows 0..10 ----
    for (int ch = 0; ch < 3; ch++) for (int y = 0; y < 11; y++) for (int x = 0; x < AW; x++) begin
      APX[ch][y][x] = r8(); u_mem.mem[A_IN + (11*ch + y)*AS + x] = 8'(APX[ch][y][x]);
    end
    for (int ch = 0; ch < 3; ch++) for (int r = 0; r < 11; r++) for (int t = 0; t < 11; t++)
      AKR[ch][r][t] = r8();
    // PE (i,j) holds tap (i,j) of channel ch in SPM byte ch; row 11 and column 11 are zero
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) for (int ch = 0; ch < 3; ch++)
      u_mem.mem[A_WT + 4*(i*COLS + j) + ch] = (i < 11 && j < 11) ? 8'(AKR[ch][i][j]) : 8'h00;

    // ---------------- A: VGG-16 conv1_1 ----------------
    set(R_IBF_BASE, V_IN); set(R_IBF_STRIDE, VW); set(R_IBF_NROWS, 9); set(R_IBF_WPR, VW/4);
    set(R_IBF_FROW, 0); set(R_IBF_DWORD, 0);
    set(R_SPF_BASE, V_WT); set(R_SPF_FPE, 0); set(R_SPF_NPE, 180); set(R_SPF_WPP, 1); set(R_SPF_DWORD, 0);
    emit(OP_START, 12'((1 << U_IBF) | (1 << U_SPF)), 0);
    emit(OP_WAIT,  12'((1 << U_IBF) | (1 << U_SPF)), 0);
    emit(OP_SWAP, 12'b11, 0);
    // prefetch channel 0 of AlexNet and its weights into the idle banks
    set(R_IBF_BASE, A_IN); set(R_IBF_STRIDE, AS); set(R_IBF_NROWS, 11); set(R_IBF_WPR, AS/4);
    set(R_SPF_BASE, A_WT);
    emit(OP_START, 12'((1 << U_IBF) | (1 << U_SPF)), 0);
    set(R_G_MODE, MODE_CONV); set(R_G_NCOLS, VW + 2); set(R_G_PADL, 1); set(R_G_IMGW, VW);
    set(R_G_IBASE, 0); set(R_G_CHAIN, 3); set(R_G_STRIDE, 1); set(R_G_NOUT, VW);
    set(R_G_MERGE, 0); set(R_G_FWD, 0); set(R_G_STORE, 'hFFFFF);
    set(R_G_ROWSEL + 12'd15, ZERO_ROW);
    for (int oy = 0; oy < 2; oy++) for (int ch = 0; ch < 3; ch++) begin
      for (int pr = 0; pr < 15; pr++) begin
        int y;
        y = oy - 1 + pr % 3;
        set(R_G_ROWSEL + 12'(pr), (y >= 0) ? 3*ch + y : ZERO_ROW);
      end
      set(R_G_WADDR, ch); set(R_G_ABASE, 75*oy); set(R_G_AFIRST, ch == 0);
      emit(OP_START, 12'(1 << U_GRID), 0);
      emit(OP_WAIT,  12'(1 << U_GRID), 0);
    end
    for (int g = 0; g < 20; g++) begin
      set(R_D_GROUP, g); set(R_D_BASE, 0); set(R_D_COUNT, 2*225);
      emit(OP_START, 12'(1 << U_DRAIN), 0);
      for (int k = 0; k < 2*225; k++) begin
        int oy, j, s;
        oy = k / 225; j = k % 225; s = 0;
        if (j < VW) for (int ch = 0; ch < 3; ch++) for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) begin
          int y, x;
          y = oy - 1 + r; x = j - 1 + c;
          if (y >= 0 && x >= 0 && x < VW) s += VKR[g][ch][r][c] * VPX[ch][y][x];
        end
        exp_q.push_back(wrap16(s)); chk_q.push_back(j < VW);
      end
    end

    // ---------------- B: AlexNet conv1 ----------------
    emit(OP_WAIT, 12'((1 << U_IBF) | (1 << U_SPF) | (1 << U_DRAIN)), 0);
    emit(OP_SWAP, 12'b11, 0);
    set(R_G_NCOLS, AW + 1); set(R_G_PADL, 0); set(R_G_IMGW, AW); set(R_G_IBASE, 0);
    set(R_G_CHAIN, 12); set(R_G_STRIDE, 4); set(R_G_NOUT, 55); set(R_G_ABASE, 0);
    // groups 4*gr + gc: columns 1..3 continue the chain, rows 0..2 add the row below
    set(R_G_MERGE, 'hEEEE); set(R_G_FWD, (1 << 3) | (1 << 7) | (1 << 11)); set(R_G_STORE, 1 << 3);
    for (int pr = 0; pr < 15; pr++) set(R_G_ROWSEL + 12'(pr), pr < 11 ? pr : ZERO_ROW);
    for (int ch = 0; ch < 3; ch++) begin
      if (ch < 2) begin
        set(R_IBF_BASE, A_IN + 11*AS*(ch + 1));
        emit(OP_START, 12'(1 << U_IBF), 0);
      end
      set(R_G_WADDR, ch); set(R_G_AFIRST, ch == 0);
      emit(OP_START, 12'(1 << U_GRID), 0);
      emit(OP_WAIT,  12'((1 << U_GRID) | (1 << U_IBF)), 0);
      emit(OP_SWAP, 12'b01, 0);
    end
    set(R_D_GROUP, 3); set(R_D_BASE, 0); set(R_D_COUNT, 55);
    emit(OP_START, 12'(1 << U_DRAIN), 0);
    for (int k = 0; k < 55; k++) begin
      int s;
      s = 0;
      for (int ch = 0; ch < 3; ch++) for (int r = 0; r < 11; r++) for (int t = 0; t < 11; t++)
        s += AKR[ch][r][t] * APX[ch][r][4*k + t];
      exp_q.push_back(wrap16(s)); chk_q.push_back(1'b1);
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
    if (n_last != 21) begin failures++; $display("FAIL %0d drains ended, expected 21", n_last); end
    checks++;
    if (n_pass != 9) begin failures++; $display("FAIL %0d passes, expected 9", n_pass); end
    $display("passes=%0d grid_busy_cycles=%0d total_cycles=%0d", n_pass, grid_busy, cyc);
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
