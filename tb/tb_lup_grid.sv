// tb_lup_grid: unit test of the processing grid, reduced to 6 x 6 PEs
// (2 x 2 groups) to keep it short.
//   A. 5x5 kernel, MODE_CONV: kernel rows 0-2 in group row 0, rows 3-4 in
//      group row 1; taps 0-2 in group column 0 and taps 3-4 in group column
//      1 (horizontal merge, sixth tap zero); group 3 forwards up into group 1,
//      which alone stores: out[j] = sum_{r<5,t<5} W[r][t] * img[r][j+t].
//   B. MODE_PW over all 6 rows: group row 1 forwards into group row 0, whose
//      two groups store lane c of pixel p = sum_r V[r][3*gc+c] * x_r[p].
// Weights are written through the row-major SPM bus; results are read back
// through the drain port.
`timescale 1ns/1ps
module tb_lup_grid;
  import lup_pkg::*;
  localparam int ROWS = 6, COLS = 6;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  mode_e mode; data_t [ROWS-1:0] x; logic [ROWS-1:0] pad;
  logic [MAX_GROUPS-1:0] merge_mask, fwd_mask, store_mask;
  acc_cmd_t cmd; logic rd_bank; logic [4:0] w_addr;
  logic spm_we; logic [7:0] spm_pe; logic spm_bank; logic [2:0] spm_waddr; logic [31:0] spm_wdata;
  logic rd_en; logic [4:0] rd_group; logic [ACC_AW-1:0] rd_addr; logic [1:0] rd_lane; psum_t rd_data;
  lup_grid #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;
  int W [5][5], V [ROWS][COLS], img [ROWS][16];

  task automatic check_word(int g, int a, int l, int e);
    rd_en = 1; rd_group = 5'(g); rd_addr = ACC_AW'(a); rd_lane = 2'(l);
    @(negedge clk); rd_en = 0;
    @(negedge clk);
    checks++;
    if (int'(rd_data) != int'(shortint'(e))) begin
      failures++;
      if (failures < 10) $display("FAIL group %0d word %0d lane %0d got %0d expected %0d", g, a, l, rd_data, shortint'(e));
    end
  endtask

  initial begin
    mode = MODE_CONV; x = '0; pad = '0; merge_mask = '0; fwd_mask = '0; store_mask = '0; cmd = '0;
    rd_bank = 0; w_addr = 0; spm_we = 0; spm_pe = 0; spm_bank = 0; spm_waddr = 0; spm_wdata = 0;
    rd_en = 0; rd_group = 0; rd_addr = 0; rd_lane = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 5; r++) for (int t = 0; t < 5; t++) W[r][t] = int'(data_t'($urandom()));
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) V[r][c] = int'(data_t'($urandom()));
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      @(negedge clk);
      spm_we = 1; spm_pe = 8'(r*COLS + c); spm_bank = 0; spm_waddr = 0;
      spm_wdata = {16'h0, 8'(V[r][c]), 8'((r < 5 && c < 5) ? W[r][c] : 0)};
    end
    @(negedge clk); spm_we = 0;
    // ---- A: 5x5 kernel over a 6 x 12 image (row 5 is not used: zero weights) ----
    for (int r = 0; r < ROWS; r++) for (int i = 0; i < 16; i++) img[r][i] = int'(data_t'($urandom()));
    mode = MODE_CONV; w_addr = 0; merge_mask = 32'b1010; fwd_mask = 32'b0010; store_mask = 32'b0010;
    for (int cyc = 0; cyc < 12 + 1 + 4; cyc++) begin
      int j;
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        x[r] = (cyc < 12) ? data_t'(img[r][cyc]) : '0; pad[r] = (cyc >= 12);
      end
      j = cyc - 5 - 2;
      cmd = '0;
      if (j >= 0 && j < 8) begin
        cmd.valid = 1; cmd.first = 1; cmd.addr = ACC_AW'(j/3); cmd.lane = 3'(1 << (j%3));
      end
    end
    @(negedge clk); cmd = '0;
    repeat (3) @(negedge clk);
    for (int j = 0; j < 8; j++) begin
      int s;
      s = 0;
      for (int r = 0; r < 5; r++) for (int t = 0; t < 5; t++) s += W[r][t] * img[r][j+t];
      check_word(1, j/3, j%3, s);
    end
    // ---- B: 1x1 kernels, 6 channels, 6 kernels, 8 pixels ----
    for (int r = 0; r < ROWS; r++) for (int i = 0; i < 8; i++) img[r][i] = int'(data_t'($urandom()));
    mode = MODE_PW; w_addr = 1; merge_mask = '0; fwd_mask = 32'b0011; store_mask = 32'b0011;
    for (int cyc = 0; cyc < 8 + 2; cyc++) begin
      int j;
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin x[r] = (cyc < 8) ? data_t'(img[r][cyc]) : '0; pad[r] = 0; end
      j = cyc - 2;
      cmd = '0;
      if (j >= 0 && j < 8) begin cmd.valid = 1; cmd.first = 1; cmd.addr = ACC_AW'(20 + j); cmd.lane = 3'b111; end
    end
    @(negedge clk); cmd = '0;
    repeat (3) @(negedge clk);
    for (int gc = 0; gc < 2; gc++) for (int p = 0; p < 8; p++) for (int c = 0; c < 3; c++) begin
      int s;
      s = 0;
      for (int r = 0; r < ROWS; r++) s += V[r][3*gc + c] * img[r][p];
      check_word(gc, 20 + p, c, s);
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
