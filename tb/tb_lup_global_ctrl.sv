// tb_lup_global_ctrl: unit test of the global controller.
//   A. Writes every configuration register with a random value and checks
//      the field it lands in.
//   B. START of two fetch units, then WAIT on one: the WAIT must be held
//      (stall) until that unit's done pulse, which this bench sends 12 cycles
//      later; START pulses must last one cycle.
//   C. START grid then START drain: the drain must wait for the grid's done.
//   D. SWAP flips the input-buffer and SPM banks independently.
//   E. 400 random START / WAIT / SET / NOP instructions against units that
//      finish after a random 1..12 cycles: in every cycle with a pending
//      instruction, instr_ready must equal the rule worked out here from this
//      bench's own record of which units are running.
`timescale 1ns/1ps
module tb_lup_global_ctrl;
  import lup_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic instr_valid, instr_ready; instr_t instr;
  ibf_cfg_t ibf_cfg; spf_cfg_t spf_cfg; grid_cfg_t grid_cfg; drain_cfg_t drain_cfg;
  logic [3:0] start, unit_done, running; logic ibuf_bank, spm_bank, stall;
  lup_global_ctrl dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  // issue one instruction; returns the cycle in which it was accepted
  task automatic issue(op_e op, logic [11:0] arg, logic [31:0] data, output int t_acc);
    @(negedge clk);
    instr_valid = 1; instr = '{op: op, arg: arg, data: data};
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    t_acc = cyc;
    @(negedge clk); instr_valid = 0; instr = '0;
  endtask


  // ---- unit model and reference for part E ----
  bit        e_on = 0;
  bit  [3:0] busy_m = '0;
  int        tmr [4];
  always @(posedge clk) if (e_on) begin
    for (int i = 0; i < 4; i++) begin
      if (start[i]) tmr[i] = $urandom_range(1, 12);
      else if (tmr[i] > 0) tmr[i] = tmr[i] - 1;
    end
  end
  always @(negedge clk) if (e_on)
    for (int i = 0; i < 4; i++) unit_done[i] = (tmr[i] == 1);
  always @(posedge clk) if (e_on) begin
    if (instr_valid && instr_ready && instr.op == OP_START) busy_m = busy_m | instr.arg[3:0];
    busy_m = busy_m & ~unit_done;
  end
  function automatic bit exp_ready(instr_t in, bit [3:0] b);
    bit [3:0] u;
    u = in.arg[3:0];
    case (in.op)
      OP_START: return (u & b) == 0 && !(u[U_GRID] && b[U_DRAIN]) && !(u[U_DRAIN] && b[U_GRID]);
      OP_WAIT:  return (u & b) == 0;
      default:  return 1'b1;
    endcase
  endfunction

  initial begin
    int t, t_start, t_wait;
    logic [31:0] v;
    instr_valid = 0; instr = '0; unit_done = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // ---- A ----
    v = $urandom(); issue(OP_SET, R_IBF_BASE, v, t);  @(negedge clk); chk(ibf_cfg.ext_base == v, "ibf base");
    v = $urandom(); issue(OP_SET, R_IBF_STRIDE, v, t); @(negedge clk); chk(ibf_cfg.row_stride == v[15:0], "ibf stride");
    v = $urandom(); issue(OP_SET, R_IBF_NROWS, v, t); @(negedge clk); chk(ibf_cfg.n_rows == v[4:0], "ibf rows");
    v = $urandom(); issue(OP_SET, R_IBF_WPR, v, t);   @(negedge clk); chk(ibf_cfg.words_per_row == v[6:0], "ibf wpr");
    v = $urandom(); issue(OP_SET, R_SPF_BASE, v, t);  @(negedge clk); chk(spf_cfg.ext_base == v, "spf base");
    v = $urandom(); issue(OP_SET, R_SPF_NPE, v, t);   @(negedge clk); chk(spf_cfg.n_pe == v[7:0], "spf npe");
    v = $urandom(); issue(OP_SET, R_G_NCOLS, v, t);   @(negedge clk); chk(grid_cfg.n_cols == v[8:0], "grid ncols");
    v = $urandom(); issue(OP_SET, R_G_CHAIN, v, t);   @(negedge clk); chk(grid_cfg.chain_len == v[4:0], "grid chain");
    v = $urandom(); issue(OP_SET, R_G_STORE, v, t);   @(negedge clk); chk(grid_cfg.store_mask == v, "grid store");
    v = $urandom(); issue(OP_SET, R_G_MERGE, v, t);   @(negedge clk); chk(grid_cfg.merge_mask == v, "grid merge");
    v = 1;          issue(OP_SET, R_G_MODE, v, t);    @(negedge clk); chk(grid_cfg.mode == MODE_PW, "grid mode");
    for (int r = 0; r < 15; r++) begin
      v = $urandom(); issue(OP_SET, R_G_ROWSEL + 12'(r), v, t); @(negedge clk);
      chk(grid_cfg.row_sel[r] == v[3:0], $sformatf("row_sel %0d", r));
    end
    v = $urandom(); issue(OP_SET, R_D_COUNT, v, t);   @(negedge clk); chk(drain_cfg.count == v[11:0], "drain count");
    v = $urandom(); issue(OP_SET, R_D_GROUP, v, t);   @(negedge clk); chk(drain_cfg.group == v[4:0], "drain group");
    // ---- B ----
    issue(OP_START, 12'b0011, 0, t_start);
    chk(start == 4'b0011, $sformatf("start pulse %b", start));
    chk(running == 4'b0011, "running after start");
    @(negedge clk); chk(start == 4'b0000, "start pulse longer than one cycle");
    fork
      begin repeat (12) @(negedge clk); unit_done = 4'b0001; @(negedge clk); unit_done = '0; end
      begin
        @(negedge clk);
        instr_valid = 1; instr = '{op: OP_WAIT, arg: 12'b0001, data: 0};
        repeat (3) @(negedge clk);
        chk(stall && !instr_ready, "WAIT not held while the unit runs");
      end
    join
    issue(OP_WAIT, 12'b0001, 0, t_wait);
    chk(running == 4'b0010, $sformatf("running after done %b", running));
    chk(t_wait - t_start >= 12, $sformatf("WAIT released after %0d cycles", t_wait - t_start));
    @(negedge clk); unit_done = 4'b0010; @(negedge clk); unit_done = '0;
    // ---- C ----
    issue(OP_START, 12'b0100, 0, t_start);
    fork
      begin repeat (8) @(negedge clk); unit_done = 4'b0100; @(negedge clk); unit_done = '0; end
      issue(OP_START, 12'b1000, 0, t_wait);
    join
    chk(t_wait - t_start >= 8, $sformatf("drain started %0d cycles after the grid", t_wait - t_start));
    chk(running == 4'b1000, "drain running");
    @(negedge clk); unit_done = 4'b1000; @(negedge clk); unit_done = '0;
    // ---- D ----
    begin
      logic ib0, sp0;
      ib0 = ibuf_bank; sp0 = spm_bank;
      issue(OP_SWAP, 12'b01, 0, t); @(negedge clk); chk(ibuf_bank == !ib0 && spm_bank == sp0, "swap input buffers");
      issue(OP_SWAP, 12'b10, 0, t); @(negedge clk); chk(ibuf_bank == !ib0 && spm_bank == !sp0, "swap SPMs");
      issue(OP_SWAP, 12'b11, 0, t); @(negedge clk); chk(ibuf_bank == ib0 && spm_bank == sp0, "swap both");
    end
    // ---- E ----
    repeat (20) @(negedge clk);
    for (int i = 0; i < 4; i++) tmr[i] = 0;
    busy_m = running;
    e_on = 1;
    for (int n = 0; n < 400; n++) begin
      instr_t in;
      int k;
      k = $urandom_range(0, 9);
      in.op   = (k < 4) ? OP_START : (k < 7) ? OP_WAIT : (k < 9) ? OP_SET : OP_NOP;
      in.arg  = (in.op == OP_SET) ? R_G_NCOLS : 12'($urandom_range(1, 15));
      // a program never starts a pass and a drain together: they share the accumulators
      if (in.op == OP_START && in.arg[U_GRID]) in.arg[U_DRAIN] = 1'b0;
      in.data = $urandom();
      @(negedge clk);
      instr_valid = 1; instr = in;
      #0.1;
      forever begin
        checks++;
        if (instr_ready != exp_ready(in, busy_m)) begin
          failures++;
          if (failures < 15) $display("FAIL E: op %0d units %b running %b ready %b", in.op, in.arg[3:0], busy_m, instr_ready);
        end
        @(posedge clk);
        if (instr_ready) break;
        @(negedge clk); #0.1;
      end
    end
    @(negedge clk); instr_valid = 0; instr = '0;
    e_on = 0;
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
