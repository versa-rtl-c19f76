// versa_tile: one Versa compute tile.
//
// A tile holds 8 worker cores in a 4 x 2 array (plus a manager core), the
// reconfigurable crossbar (RXB), the 8 slices of the L1 reconfigurable
// on-chip memory (ROCM, 8 x 4 KB), the memory-mapped mode control and the
// 8 KB tile scratchpad (T-SPM). The ARM cores themselves are not part of this
// RTL: every worker appears as its FPU register-file port (through its R2R
// shim), its RXB memory port and its T-SPM port; the manager appears as its
// mode-control port and its T-SPM port.
//
// Worker w sits in row w/2, column w%2 (this design's own numbering). The R2R
// shims of neighbouring workers are wired together inside the tile; the
// links that leave the tile (west side of column 0, east side of column 1,
// north side of row 0, south side of row 3) are ports, so that tiles placed
// side by side continue the systolic array across tile boundaries.
//
// Timing: see rxb (2-cycle private, 3-cycle shared ROCM reads), rocm_slice
// (miss handling over the 128-bit L2 ports), mode_ctrl (2-cycle mode
// transitions), r2r_shim and scratchpad (1-cycle reads).
//
// Synthesis lists some of the tile's output bits as idle: the wdata of the
// R2R links leaving the tile is the worker's write-back data wired straight
// through (see r2r_shim), and the upper 24 bits of mc_rdata are constant
// zero (see mode_ctrl).
module versa_tile
  import versa_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // manager: mode control
  input  logic              mc_we,
  input  logic              mc_re,
  input  logic [3:0]        mc_addr,
  input  logic [XLEN-1:0]   mc_wdata,
  output logic [XLEN-1:0]   mc_rdata,
  // manager: T-SPM port
  input  logic              m_spm_req,
  input  logic              m_spm_we,
  input  logic [AW-1:0]     m_spm_addr,
  input  logic [XLEN-1:0]   m_spm_wdata,
  output logic              m_spm_gnt,
  output logic              m_spm_rvalid,
  // workers: FPU register file (through the R2R shim)
  input  logic              rf_wen     [N_WORKERS],
  input  logic [4:0]        rf_wsel    [N_WORKERS],
  input  logic [XLEN-1:0]   rf_wdata   [N_WORKERS],
  output logic              rf_wr_stall[N_WORKERS],
  input  logic              rf_ren     [N_WORKERS][2],
  input  logic [4:0]        rf_rsel    [N_WORKERS][2],
  output logic [XLEN-1:0]   rf_rdata   [N_WORKERS][2],
  output logic              rf_rd_stall[N_WORKERS],
  // workers: RXB / ROCM port
  input  logic              w_rd_req   [N_WORKERS],
  input  logic              w_wr_req   [N_WORKERS],
  input  logic [AW-1:0]     w_addr     [N_WORKERS],
  input  logic [XLEN-1:0]   w_wdata    [N_WORKERS],
  output logic              w_rd_gnt   [N_WORKERS],
  output logic              w_wr_gnt   [N_WORKERS],
  output logic              w_rvalid   [N_WORKERS],
  output logic [XLEN-1:0]   w_rdata    [N_WORKERS],
  // workers: T-SPM port
  input  logic              w_spm_req  [N_WORKERS],
  input  logic              w_spm_we   [N_WORKERS],
  input  logic [AW-1:0]     w_spm_addr [N_WORKERS],
  input  logic [XLEN-1:0]   w_spm_wdata[N_WORKERS],
  output logic              w_spm_gnt  [N_WORKERS],
  output logic              w_spm_rvalid[N_WORKERS],
  // read data of the T-SPM, shared by all its requesters
  output logic [XLEN-1:0]   spm_rdata,
  // ROCM slices: L2 ports
  output logic              l2_req_valid[N_SLICES],
  input  logic              l2_req_ready[N_SLICES],
  output logic              l2_req_we   [N_SLICES],
  output logic [AW-1:0]     l2_req_addr [N_SLICES],
  output logic              l2_wvalid   [N_SLICES],
  output logic [L2W-1:0]    l2_wdata    [N_SLICES],
  input  logic              l2_rvalid   [N_SLICES],
  input  logic [L2W-1:0]    l2_rdata    [N_SLICES],
  // R2R links leaving the tile, indexed by row (W/E) or column (N/S)
  output r2r_link_t         edge_w_out [TILE_ROWS],
  input  r2r_link_t         edge_w_in  [TILE_ROWS],
  output r2r_link_t         edge_e_out [TILE_ROWS],
  input  r2r_link_t         edge_e_in  [TILE_ROWS],
  output r2r_link_t         edge_n_out [TILE_COLS],
  input  r2r_link_t         edge_n_in  [TILE_COLS],
  output r2r_link_t         edge_s_out [TILE_COLS],
  input  r2r_link_t         edge_s_in  [TILE_COLS],
  // current configuration and events, for software-visible counters
  output rxb_mode_e         cfg_rxb_mode,
  output rocm_mode_e        cfg_rocm_mode,
  output logic              cfg_busy,
  output logic [N_WORKERS-1:0] ev_conflict,
  output logic [N_SLICES-1:0]  ev_hit,
  output logic [N_SLICES-1:0]  ev_miss,
  output logic [N_SLICES-1:0]  ev_writeback
);

  // ------------------------------------------------------------ mode control
  logic [N_WORKERS-1:0] r2r_en;
  logic                 apply;

  mode_ctrl u_mode (
    .clk       (clk),
    .rst_n     (rst_n),
    .mc_we     (mc_we),
    .mc_re     (mc_re),
    .mc_addr   (mc_addr),
    .mc_wdata  (mc_wdata),
    .mc_rdata  (mc_rdata),
    .rxb_mode  (cfg_rxb_mode),
    .rocm_mode (cfg_rocm_mode),
    .r2r_en    (r2r_en),
    .busy      (cfg_busy),
    .apply     (apply)
  );

  // -------------------------------------------------------------- R2R array
  r2r_link_t out_l [N_WORKERS][4];
  r2r_link_t in_l  [N_WORKERS][4];

  for (genvar w = 0; w < N_WORKERS; w++) begin : g_shim
    r2r_shim u_shim (
      .clk      (clk),
      .rst_n    (rst_n),
      .r2r_en   (r2r_en[w]),
      .wen      (rf_wen[w]),
      .wsel     (rf_wsel[w]),
      .wdata    (rf_wdata[w]),
      .wr_stall (rf_wr_stall[w]),
      .ren      (rf_ren[w]),
      .rsel     (rf_rsel[w]),
      .rdata    (rf_rdata[w]),
      .rd_stall (rf_rd_stall[w]),
      .out_link (out_l[w]),
      .in_link  (in_l[w])
    );
  end

  // neighbour wiring: worker w at (r, c) = (w/2, w%2)
  always_comb begin
    for (int r = 0; r < TILE_ROWS; r++) begin
      for (int c = 0; c < TILE_COLS; c++) begin
        automatic int w = r * TILE_COLS + c;
        // west
        if (c == 0) begin
          in_l[w][DIR_W] = edge_w_in[r];
          edge_w_out[r]  = out_l[w][DIR_W];
        end else begin
          in_l[w][DIR_W] = out_l[w-1][DIR_E];
        end
        // east
        if (c == TILE_COLS - 1) begin
          in_l[w][DIR_E] = edge_e_in[r];
          edge_e_out[r]  = out_l[w][DIR_E];
        end else begin
          in_l[w][DIR_E] = out_l[w+1][DIR_W];
        end
        // north
        if (r == 0) begin
          in_l[w][DIR_N] = edge_n_in[c];
          edge_n_out[c]  = out_l[w][DIR_N];
        end else begin
          in_l[w][DIR_N] = out_l[w-TILE_COLS][DIR_S];
        end
        // south
        if (r == TILE_ROWS - 1) begin
          in_l[w][DIR_S] = edge_s_in[c];
          edge_s_out[c]  = out_l[w][DIR_S];
        end else begin
          in_l[w][DIR_S] = out_l[w+TILE_COLS][DIR_N];
        end
      end
    end
  end

  // -------------------------------------------------------------- RXB + ROCM
  logic            s_rd_req  [N_SLICES];
  logic            s_wr_req  [N_SLICES];
  logic [AW-1:0]   s_addr    [N_SLICES];
  logic [XLEN-1:0] s_wdata   [N_SLICES];
  logic [2:0]      s_id      [N_SLICES];
  logic            s_rd_ready[N_SLICES];
  logic            s_wr_ready[N_SLICES];
  logic            s_rvalid  [N_SLICES];
  logic [XLEN-1:0] s_rdata   [N_SLICES];
  logic [2:0]      s_rid     [N_SLICES];

  rxb #(.N(N_SLICES)) u_rxb (
    .clk        (clk),
    .rst_n      (rst_n),
    .mode       (cfg_rxb_mode),
    .hold       (cfg_busy),
    .w_rd_req   (w_rd_req),
    .w_wr_req   (w_wr_req),
    .w_addr     (w_addr),
    .w_wdata    (w_wdata),
    .w_rd_gnt   (w_rd_gnt),
    .w_wr_gnt   (w_wr_gnt),
    .w_rvalid   (w_rvalid),
    .w_rdata    (w_rdata),
    .s_rd_req   (s_rd_req),
    .s_wr_req   (s_wr_req),
    .s_addr     (s_addr),
    .s_wdata    (s_wdata),
    .s_id       (s_id),
    .s_rd_ready (s_rd_ready),
    .s_wr_ready (s_wr_ready),
    .s_rvalid   (s_rvalid),
    .s_rdata    (s_rdata),
    .s_rid      (s_rid),
    .ev_conflict(ev_conflict)
  );

  logic shared;
  assign shared = (cfg_rxb_mode == RXB_SHARED);

  for (genvar j = 0; j < N_SLICES; j++) begin : g_slice
    rocm_slice #(.SLICE_ID(3'(j))) u_slice (
      .clk          (clk),
      .rst_n        (rst_n),
      .mode         (cfg_rocm_mode),
      .shared       (shared),
      .mode_apply   (apply),
      .rd_req       (s_rd_req[j]),
      .wr_req       (s_wr_req[j]),
      .addr         (s_addr[j]),
      .wdata        (s_wdata[j]),
      .id           (s_id[j]),
      .rd_ready     (s_rd_ready[j]),
      .wr_ready     (s_wr_ready[j]),
      .rvalid       (s_rvalid[j]),
      .rdata        (s_rdata[j]),
      .rid          (s_rid[j]),
      .l2_req_valid (l2_req_valid[j]),
      .l2_req_ready (l2_req_ready[j]),
      .l2_req_we    (l2_req_we[j]),
      .l2_req_addr  (l2_req_addr[j]),
      .l2_wvalid    (l2_wvalid[j]),
      .l2_wdata     (l2_wdata[j]),
      .l2_rvalid    (l2_rvalid[j]),
      .l2_rdata     (l2_rdata[j]),
      .ev_hit       (ev_hit[j]),
      .ev_miss      (ev_miss[j]),
      .ev_writeback (ev_writeback[j])
    );
  end

  // ------------------------------------------------------------------ T-SPM
  // port i < 8: worker i; port 8: manager
  localparam int unsigned NSP = N_WORKERS + 1;
  logic [NSP-1:0]  sp_req, sp_we, sp_gnt, sp_rvalid;
  logic [AW-1:0]   sp_addr  [NSP];
  logic [XLEN-1:0] sp_wdata [NSP];

  always_comb begin
    for (int i = 0; i < N_WORKERS; i++) begin
      sp_req[i]       = w_spm_req[i];
      sp_we[i]        = w_spm_we[i];
      sp_addr[i]      = w_spm_addr[i];
      sp_wdata[i]     = w_spm_wdata[i];
      w_spm_gnt[i]    = sp_gnt[i];
      w_spm_rvalid[i] = sp_rvalid[i];
    end
    sp_req[N_WORKERS]   = m_spm_req;
    sp_we[N_WORKERS]    = m_spm_we;
    sp_addr[N_WORKERS]  = m_spm_addr;
    sp_wdata[N_WORKERS] = m_spm_wdata;
    m_spm_gnt           = sp_gnt[N_WORKERS];
    m_spm_rvalid        = sp_rvalid[N_WORKERS];
  end

  scratchpad #(.N_PORTS(NSP), .SIZE_BYTES(8192)) u_tspm (
    .clk    (clk),
    .rst_n  (rst_n),
    .req    (sp_req),
    .we     (sp_we),
    .addr   (sp_addr),
    .wdata  (sp_wdata),
    .gnt    (sp_gnt),
    .rvalid (sp_rvalid),
    .rdata  (spm_rdata)
  );

endmodule
