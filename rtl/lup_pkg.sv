// lup_pkg: shared constants and types of the Lupulus neural-network accelerator.
//
// The accelerator is a grid of processing elements (PEs) organised in 3x3
// groups. Inputs are 8-bit signed, partial sums 16-bit signed (both as in the
// published design). The configuration records below are written by the
// global controller from an instruction stream; their field widths, the
// instruction format and the register map are this design's own choices,
// sized so that the published 15x12 grid (20 groups, 15 input buffers of
// 256 B, 32 B of weights per PE, 2048 B of partial sums per group) fits.
package lup_pkg;

  localparam int unsigned DW        = 8;    // input / weight width
  localparam int unsigned PW        = 16;   // partial-sum width
  localparam int unsigned GR        = 3;    // PE rows per group
  localparam int unsigned GC        = 3;    // PE columns per group (= accumulator lanes)
  localparam int unsigned EXT_DW    = 32;   // external memory data width
  localparam int unsigned EXT_AW    = 32;   // external memory byte address width
  localparam int unsigned MAX_ROWS  = 16;   // size of the row-select table
  localparam int unsigned MAX_GROUPS= 32;   // size of the per-group masks
  localparam int unsigned ACC_AW    = 10;   // accumulator word address width
  localparam int unsigned IB_AW     = 8;    // input buffer byte address width (256 B)
  localparam int unsigned SPM_AW    = 5;    // SPM byte address width (32 B)
  localparam logic [3:0]  ZERO_ROW  = 4'hF; // row-select code: feed zeros (vertical padding)

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [PW-1:0] psum_t;

  // Dataflow of a compute pass.
  //  MODE_CONV: PEs of a row form a systolic chain (k x k kernels);
  //             each group stores one output pixel per cycle.
  //  MODE_PW  : every PE works alone (1x1 kernels / FC layers);
  //             each group stores one value per PE column per cycle.
  typedef enum logic [0:0] {MODE_CONV = 1'b0, MODE_PW = 1'b1} mode_e;

  // Accumulate command, one per output position, sent to every group.
  typedef struct packed {
    logic              valid;
    logic              first;   // overwrite instead of accumulate
    logic [ACC_AW-1:0] addr;    // word address within each lane
    logic [GC-1:0]     lane;    // lanes written (one-hot in CONV, all in PW)
  } acc_cmd_t;

  // Input buffer fetch unit: rows r < n_rows, words w < words_per_row:
  //   external byte address ext_base + r*row_stride + 4*w
  //   -> input buffer (first_row + r), word (dst_word + w)
  typedef struct packed {
    logic [EXT_AW-1:0] ext_base;
    logic [15:0]       row_stride;
    logic [4:0]        n_rows;
    logic [6:0]        words_per_row;
    logic [3:0]        first_row;
    logic [5:0]        dst_word;
  } ibf_cfg_t;

  // PE SPM fetch unit: PEs p < n_pe, words w < words_per_pe, read contiguously
  // from ext_base -> PE (first_pe + p), SPM word (dst_word + w).
  typedef struct packed {
    logic [EXT_AW-1:0] ext_base;
    logic [7:0]        first_pe;
    logic [7:0]        n_pe;
    logic [3:0]        words_per_pe;
    logic [2:0]        dst_word;
  } spf_cfg_t;

  // One compute pass of the processing grid.
  typedef struct packed {
    mode_e                          mode;
    logic [8:0]                     n_cols;     // columns streamed, padding included
    logic [7:0]                     pad_left;   // leading zero columns
    logic [8:0]                     img_w;      // real columns after the padding
    logic [IB_AW-1:0]               ibuf_base;  // input buffer byte of the first real column
    logic [4:0]                     chain_len;  // PEs in a partial-sum chain (CONV), 1 in PW
    logic [3:0]                     stride;     // horizontal stride
    logic [9:0]                     n_out;      // outputs stored per chain / column
    logic [SPM_AW-1:0]              w_addr;     // SPM byte used by every PE in this pass
    logic [ACC_AW-1:0]              acc_base;   // first accumulator word
    logic                           acc_first;  // first contribution: overwrite
    logic [MAX_GROUPS-1:0]          merge_mask; // group continues the chain of its left neighbour
    logic [MAX_GROUPS-1:0]          fwd_mask;   // group adds the column sums of the group below
    logic [MAX_GROUPS-1:0]          store_mask; // group writes its accumulator
    logic [MAX_ROWS-1:0][3:0]       row_sel;    // mesh: input buffer feeding each PE row
  } grid_cfg_t;

  // Read-out of one group's accumulator: word k goes to address base + k/GC, lane k%GC.
  typedef struct packed {
    logic [4:0]        group;
    logic [ACC_AW-1:0] base;
    logic [11:0]       count;
  } drain_cfg_t;

  // Instruction word of the global controller.
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_SET   = 4'd1,  // arg = register address, data = value
    OP_START = 4'd2,  // arg[3:0] = units to start
    OP_WAIT  = 4'd3,  // arg[3:0] = units to wait for
    OP_SWAP  = 4'd4   // arg[0] = input buffer banks, arg[1] = SPM banks
  } op_e;

  // Unit bits used by OP_START / OP_WAIT.
  localparam int unsigned U_IBF   = 0;
  localparam int unsigned U_SPF   = 1;
  localparam int unsigned U_GRID  = 2;
  localparam int unsigned U_DRAIN = 3;

  typedef struct packed {
    op_e         op;
    logic [11:0] arg;
    logic [31:0] data;
  } instr_t;

  // Register map of OP_SET.
  localparam logic [11:0] R_IBF_BASE = 12'h000, R_IBF_STRIDE = 12'h001, R_IBF_NROWS = 12'h002,
                          R_IBF_WPR  = 12'h003, R_IBF_FROW   = 12'h004, R_IBF_DWORD = 12'h005;
  localparam logic [11:0] R_SPF_BASE = 12'h008, R_SPF_FPE    = 12'h009, R_SPF_NPE   = 12'h00A,
                          R_SPF_WPP  = 12'h00B, R_SPF_DWORD  = 12'h00C;
  localparam logic [11:0] R_G_MODE = 12'h010, R_G_NCOLS = 12'h011, R_G_PADL  = 12'h012,
                          R_G_IMGW = 12'h013, R_G_IBASE = 12'h014, R_G_CHAIN = 12'h015,
                          R_G_STRIDE = 12'h016, R_G_NOUT = 12'h017, R_G_WADDR = 12'h018,
                          R_G_ABASE = 12'h019, R_G_AFIRST = 12'h01A, R_G_MERGE = 12'h01B,
                          R_G_FWD = 12'h01C, R_G_STORE = 12'h01D, R_G_ROWSEL = 12'h020;
  localparam logic [11:0] R_D_GROUP = 12'h030, R_D_BASE = 12'h031, R_D_COUNT = 12'h032;

endpackage
