// versa_pkg: constants and types shared by the Versa RTL.
//
// The counts (4 tiles, 8 workers per tile in a 4x2 array, 8 ROCM slices of
// 4 KB, 32-bit worker ports, 128-bit L2 port, 4-way cache with 64-byte lines
// and 16 sets) follow the paper. The mode encodings, the register map of the
// mode controller and the worker numbering inside a tile are this design's
// own choices.
package versa_pkg;

  localparam int unsigned N_TILES       = 4;   // compute tiles per chip
  localparam int unsigned N_WORKERS     = 8;   // worker cores per tile
  localparam int unsigned N_SLICES      = 8;   // ROCM slices per tile
  localparam int unsigned TILE_ROWS     = 4;   // worker array: 4 rows
  localparam int unsigned TILE_COLS     = 2;   //               x 2 columns
  localparam int unsigned XLEN          = 32;  // worker data width
  localparam int unsigned AW            = 32;  // worker byte address width
  localparam int unsigned L2W           = 128; // ROCM <-> L2 port width
  localparam int unsigned N_FPREGS      = 32;  // FPU registers s0..s31

  // RXB operating mode (selected by the manager through mode control).
  typedef enum logic [1:0] {
    RXB_SHARED  = 2'd0,
    RXB_PRIVATE = 2'd1,
    RXB_QUEUE   = 2'd2
  } rxb_mode_e;

  // ROCM slice operating mode.
  typedef enum logic [1:0] {
    ROCM_CACHE = 2'd0,
    ROCM_SPM   = 2'd1,
    ROCM_QUEUE = 2'd2
  } rocm_mode_e;

  // R2R link directions; s0..s3 alias W, E, N, S in this order.
  typedef enum logic [1:0] {
    DIR_W = 2'd0,
    DIR_E = 2'd1,
    DIR_N = 2'd2,
    DIR_S = 2'd3
  } r2r_dir_e;

  // One direction of an R2R link as seen from the sending shim:
  // wen/wdata carry a systolic write, rden tells the other side that the
  // word it sent earlier has been consumed.
  typedef struct packed {
    logic             wen;
    logic [XLEN-1:0]  wdata;
    logic             rden;
  } r2r_link_t;

  // Mode-control register offsets (byte addresses in the manager's map).
  localparam logic [3:0] MC_REG_MODE   = 4'h0; // [1:0] rxb mode, [3:2] rocm mode
  localparam logic [3:0] MC_REG_R2R_EN = 4'h4; // [7:0] R2R enable per worker
  localparam logic [3:0] MC_REG_STATUS = 4'h8; // [0] transition in progress

endpackage
