// lup_global_ctrl: global controller.
//
// Takes an offline-generated instruction stream (valid/ready, one instr_t per
// accepted cycle) and dispatches it:
//   OP_SET   arg, data : write one configuration register (map in lup_pkg)
//                        of the input fetch unit, SPM fetch unit, grid
//                        controller or drain sequence;
//   OP_START units     : start the units in arg[3:0] (U_IBF, U_SPF, U_GRID,
//                        U_DRAIN). The instruction is held back while a named
//                        unit is still running, and a compute pass and a
//                        drain exclude each other because they share the
//                        accumulators;
//   OP_WAIT  units     : hold the stream until the named units are finished;
//   OP_SWAP  which     : flip the double-buffer bank of the input buffers
//                        (arg[0]) and/or of the PE SPMs (arg[1]). Fetch units
//                        write the bank the grid is not reading.
// The controller keeps a running bit per unit, set by its own start pulse and
// cleared by the unit's done pulse, so a WAIT right after a START is exact.
// `stall` is high while an instruction is held back.
// The published design names this controller's duties (dispatch instructions,
// decide which fetch units run and when the grid starts); the instruction
// format and register map are this design's own.
module lup_global_ctrl
  import lup_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        instr_valid,
  output logic        instr_ready,
  input  instr_t      instr,
  output ibf_cfg_t    ibf_cfg,
  output spf_cfg_t    spf_cfg,
  output grid_cfg_t   grid_cfg,
  output drain_cfg_t  drain_cfg,
  output logic [3:0]  start,       // one-hot pulses, bit = unit
  input  logic [3:0]  unit_done,   // done pulses, bit = unit
  output logic [3:0]  running,
  output logic        ibuf_bank,   // bank read by the grid
  output logic        spm_bank,    // bank read by the PEs
  output logic        stall
);

  logic [3:0] req_units;
  logic       can_go;

  always_comb begin
    req_units  = instr.arg[3:0];
    unique case (instr.op)
      OP_START: can_go = ((req_units | (req_units[U_GRID]  ? 4'(1 << U_DRAIN) : 4'b0)
                                     | (req_units[U_DRAIN] ? 4'(1 << U_GRID)  : 4'b0)) & running) == 4'b0;
      OP_WAIT:  can_go = (req_units & running) == 4'b0;
      default:  can_go = 1'b1;
    endcase
  end

  assign instr_ready = can_go;
  assign stall       = instr_valid && !can_go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ibf_cfg   <= '0;
      spf_cfg   <= '0;
      grid_cfg  <= '0;
      drain_cfg <= '0;
      start     <= '0;
      running   <= '0;
      ibuf_bank <= 1'b0;
      spm_bank  <= 1'b0;
    end else begin
      start   <= '0;
      running <= running & ~unit_done;
      if (instr_valid && can_go) begin
        unique case (instr.op)
          OP_SET: begin
            unique case (instr.arg)
              R_IBF_BASE:   ibf_cfg.ext_base      <= instr.data;
              R_IBF_STRIDE: ibf_cfg.row_stride    <= instr.data[15:0];
              R_IBF_NROWS:  ibf_cfg.n_rows        <= instr.data[4:0];
              R_IBF_WPR:    ibf_cfg.words_per_row <= instr.data[6:0];
              R_IBF_FROW:   ibf_cfg.first_row     <= instr.data[3:0];
              R_IBF_DWORD:  ibf_cfg.dst_word      <= instr.data[5:0];
              R_SPF_BASE:   spf_cfg.ext_base      <= instr.data;
              R_SPF_FPE:    spf_cfg.first_pe      <= instr.data[7:0];
              R_SPF_NPE:    spf_cfg.n_pe          <= instr.data[7:0];
              R_SPF_WPP:    spf_cfg.words_per_pe  <= instr.data[3:0];
              R_SPF_DWORD:  spf_cfg.dst_word      <= instr.data[2:0];
              R_G_MODE:     grid_cfg.mode         <= mode_e'(instr.data[0]);
              R_G_NCOLS:    grid_cfg.n_cols       <= instr.data[8:0];
              R_G_PADL:     grid_cfg.pad_left     <= instr.data[7:0];
              R_G_IMGW:     grid_cfg.img_w        <= instr.data[8:0];
              R_G_IBASE:    grid_cfg.ibuf_base    <= instr.data[IB_AW-1:0];
              R_G_CHAIN:    grid_cfg.chain_len    <= instr.data[4:0];
              R_G_STRIDE:   grid_cfg.stride       <= instr.data[3:0];
              R_G_NOUT:     grid_cfg.n_out        <= instr.data[9:0];
              R_G_WADDR:    grid_cfg.w_addr       <= instr.data[SPM_AW-1:0];
              R_G_ABASE:    grid_cfg.acc_base     <= instr.data[ACC_AW-1:0];
              R_G_AFIRST:   grid_cfg.acc_first    <= instr.data[0];
              R_G_MERGE:    grid_cfg.merge_mask   <= instr.data[MAX_GROUPS-1:0];
              R_G_FWD:      grid_cfg.fwd_mask     <= instr.data[MAX_GROUPS-1:0];
              R_G_STORE:    grid_cfg.store_mask   <= instr.data[MAX_GROUPS-1:0];
              R_D_GROUP:    drain_cfg.group       <= instr.data[4:0];
              R_D_BASE:     drain_cfg.base        <= instr.data[ACC_AW-1:0];
              R_D_COUNT:    drain_cfg.count       <= instr.data[11:0];
              default: begin
                if (instr.arg >= R_G_ROWSEL && instr.arg < R_G_ROWSEL + 12'(MAX_ROWS))
                  grid_cfg.row_sel[4'(instr.arg - R_G_ROWSEL)] <= instr.data[3:0];
              end
            endcase
          end
          OP_START: begin
            start   <= req_units;
            running <= (running & ~unit_done) | req_units;
          end
          OP_SWAP: begin
            if (instr.arg[0]) ibuf_bank <= ~ibuf_bank;
            if (instr.arg[1]) spm_bank  <= ~spm_bank;
          end
          default: ;
        endcase
      end
    end
  end

  a_done_only_when_running: assert property (@(posedge clk) disable iff (!rst_n)
    (unit_done & ~running) == 4'b0);

endmodule
