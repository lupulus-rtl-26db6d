// lup_top: the Lupulus accelerator.
//
// Blocks and their connections follow the published top-level drawing: a
// global controller fed with instructions, an input buffer fetch unit and a PE
// SPM fetch unit with their own external read ports, one double-buffered
// input SRAM per PE row, the mesh network from the buffers to the PE rows,
// the processing grid of 3x3 PE groups with accumulators, and the grid
// controller that sequences a pass and reads results out.
//
// Interfaces:
//   instr_*           instruction stream (valid/ready, lup_pkg::instr_t)
//   ibf_*             input fetch read port: request valid/ready + byte address,
//                     32-bit responses in request order
//   spf_*             SPM fetch read port, same protocol
//   out_*             16-bit partial sums drained from an accumulator
//                     (valid/ready, out_last on the final word)
//   running           units still running (U_IBF, U_SPF, U_GRID, U_DRAIN)
// The external memory and its single-channel arbitration are outside.
// Parameter defaults are the published configuration: 15 x 12 PEs, 256 B per
// input buffer bank, 32 B per SPM bank, 2048 B (here 3 x 341 words) per
// accumulator, two banks for the input buffers and the SPMs.
module lup_top
  import lup_pkg::*;
#(
  parameter int unsigned ROWS      = 15,
  parameter int unsigned COLS      = 12,
  parameter int unsigned IB_BYTES  = 256,
  parameter int unsigned SPM_BYTES = 32,
  parameter int unsigned ACC_DEPTH = 341
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               instr_valid,
  output logic               instr_ready,
  input  instr_t             instr,
  output logic               ibf_req_valid,
  input  logic               ibf_req_ready,
  output logic [EXT_AW-1:0]  ibf_req_addr,
  input  logic               ibf_resp_valid,
  input  logic [EXT_DW-1:0]  ibf_resp_data,
  output logic               spf_req_valid,
  input  logic               spf_req_ready,
  output logic [EXT_AW-1:0]  spf_req_addr,
  input  logic               spf_resp_valid,
  input  logic [EXT_DW-1:0]  spf_resp_data,
  output logic               out_valid,
  input  logic               out_ready,
  output psum_t              out_data,
  output logic               out_last,
  output logic [3:0]         running
);

  ibf_cfg_t   ibf_cfg;
  spf_cfg_t   spf_cfg;
  grid_cfg_t  grid_cfg;     // as loaded by the global controller
  grid_cfg_t  act_cfg;      // of the pass that is running
  drain_cfg_t drain_cfg;
  logic [3:0] start, unit_done;
  logic       ibuf_bank, spm_bank, stall;
  logic       grid_busy, drain_busy;

  lup_global_ctrl u_gctrl (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr,
    .ibf_cfg, .spf_cfg, .grid_cfg, .drain_cfg, .start, .unit_done, .running,
    .ibuf_bank, .spm_bank, .stall);

  // ---- input buffer fetch unit and input buffers ----
  logic               ib_we;
  logic [3:0]         ib_row;
  logic [5:0]         ib_word;
  logic [EXT_DW-1:0]  ib_wdata;
  logic               ibf_busy;

  lup_ibuf_fetch u_ibf (
    .clk, .rst_n, .cfg_in(ibf_cfg), .start(start[U_IBF]), .busy(ibf_busy), .done(unit_done[U_IBF]),
    .req_valid(ibf_req_valid), .req_ready(ibf_req_ready), .req_addr(ibf_req_addr),
    .resp_valid(ibf_resp_valid), .resp_data(ibf_resp_data),
    .ib_we, .ib_row, .ib_word, .ib_wdata);

  logic               ibuf_re, grid_pad;
  logic [IB_AW-1:0]   ibuf_raddr;
  data_t [ROWS-1:0]   buf_data;

  for (genvar i = 0; i < ROWS; i++) begin : g_ibuf
    lup_input_buffer #(.BYTES(IB_BYTES), .BANKS(2)) u_ibuf (
      .clk,
      .we(ib_we && ib_row == 4'(i)), .wbank(~ibuf_bank),
      .waddr(ib_word[$clog2(IB_BYTES/4)-1:0]), .wdata(ib_wdata),
      .re(ibuf_re), .rbank(ibuf_bank), .raddr(ibuf_raddr[$clog2(IB_BYTES)-1:0]),
      .rdata(buf_data[i]));
  end

  // ---- mesh network ----
  data_t [ROWS-1:0] x;
  logic  [ROWS-1:0] pad;

  lup_mesh #(.ROWS(ROWS)) u_mesh (
    .clk, .rst_n, .buf_data, .pad_in(grid_pad), .row_sel(act_cfg.row_sel), .x, .pad);

  // ---- SPM fetch unit ----
  logic              spm_we;
  logic [7:0]        spm_pe;
  logic [2:0]        spm_waddr;
  logic [EXT_DW-1:0] spm_wdata;
  logic              spf_busy;

  lup_spm_fetch u_spf (
    .clk, .rst_n, .cfg_in(spf_cfg), .start(start[U_SPF]), .busy(spf_busy), .done(unit_done[U_SPF]),
    .req_valid(spf_req_valid), .req_ready(spf_req_ready), .req_addr(spf_req_addr),
    .resp_valid(spf_resp_valid), .resp_data(spf_resp_data),
    .spm_we, .spm_pe, .spm_waddr, .spm_wdata);

  // ---- grid controller and processing grid ----
  acc_cmd_t          cmd;
  logic              rd_en;
  logic [4:0]        rd_group;
  logic [ACC_AW-1:0] rd_addr;
  logic [1:0]        rd_lane;
  psum_t             rd_data;

  lup_grid_ctrl u_gridctrl (
    .clk, .rst_n, .cfg_in(grid_cfg), .cfg(act_cfg), .start(start[U_GRID]), .busy(grid_busy), .done(unit_done[U_GRID]),
    .dcfg_in(drain_cfg), .drain_start(start[U_DRAIN]), .drain_busy, .drain_done(unit_done[U_DRAIN]),
    .ibuf_re, .ibuf_raddr, .pad(grid_pad),
    .cmd, .rd_en, .rd_group, .rd_addr, .rd_lane, .rd_data,
    .out_valid, .out_ready, .out_data, .out_last);

  lup_grid #(.ROWS(ROWS), .COLS(COLS), .SPM_BYTES(SPM_BYTES), .ACC_DEPTH(ACC_DEPTH)) u_grid (
    .clk, .rst_n, .mode(act_cfg.mode), .x, .pad,
    .merge_mask(act_cfg.merge_mask), .fwd_mask(act_cfg.fwd_mask), .store_mask(act_cfg.store_mask),
    .cmd, .rd_bank(spm_bank), .w_addr(act_cfg.w_addr[$clog2(SPM_BYTES)-1:0]),
    .spm_we, .spm_pe, .spm_bank(~spm_bank), .spm_waddr(spm_waddr[$clog2(SPM_BYTES/4)-1:0]),
    .spm_wdata,
    .rd_en, .rd_group, .rd_addr, .rd_lane, .rd_data);

  // The grid and drain never run together (the global controller keeps them apart).
  a_grid_drain_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(grid_busy && drain_busy));

endmodule
