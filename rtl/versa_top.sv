// versa_top: the Versa chip, four compute tiles and the global scratchpad.
//
// The four tiles sit side by side. The east R2R links of tile t connect to
// the west R2R links of tile t+1, so the 32 workers form one 4-row by
// 8-column systolic array that spans the chip. The four managers share the
// 8 KB global scratchpad (G-SPM) over the managers' bus; together with the
// per-tile T-SPMs it supports the tree-based barrier: workers synchronise in
// their tile's T-SPM, then one manager per tile in the G-SPM.
//
// The ARM Cortex-M4F worker and manager cores, the L2/L2.5/L3 caches, the
// DRAM emulation and the host interfaces are not part of this RTL. Their
// connection points are the ports of this module: per worker its register
// file, ROCM and T-SPM ports; per manager its mode-control, T-SPM and G-SPM
// ports; per ROCM slice its 128-bit L2 port; and the R2R links on the edge
// of the worker array. All arrays are indexed [tile][worker or slice].
//
// Timing is that of the blocks: see versa_tile.
module versa_top
  import versa_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // managers: mode control
  input  logic              mc_we      [N_TILES],
  input  logic              mc_re      [N_TILES],
  input  logic [3:0]        mc_addr    [N_TILES],
  input  logic [XLEN-1:0]   mc_wdata   [N_TILES],
  output logic [XLEN-1:0]   mc_rdata   [N_TILES],
  // managers: T-SPM port
  input  logic              m_spm_req  [N_TILES],
  input  logic              m_spm_we   [N_TILES],
  input  logic [AW-1:0]     m_spm_addr [N_TILES],
  input  logic [XLEN-1:0]   m_spm_wdata[N_TILES],
  output logic              m_spm_gnt  [N_TILES],
  output logic              m_spm_rvalid[N_TILES],
  // managers: G-SPM bus
  input  logic [N_TILES-1:0] g_spm_req,
  input  logic [N_TILES-1:0] g_spm_we,
  input  logic [AW-1:0]     g_spm_addr [N_TILES],
  input  logic [XLEN-1:0]   g_spm_wdata[N_TILES],
  output logic [N_TILES-1:0] g_spm_gnt,
  output logic [N_TILES-1:0] g_spm_rvalid,
  output logic [XLEN-1:0]   g_spm_rdata,
  // workers: FPU register file
  input  logic              rf_wen     [N_TILES][N_WORKERS],
  input  logic [4:0]        rf_wsel    [N_TILES][N_WORKERS],
  input  logic [XLEN-1:0]   rf_wdata   [N_TILES][N_WORKERS],
  output logic              rf_wr_stall[N_TILES][N_WORKERS],
  input  logic              rf_ren     [N_TILES][N_WORKERS][2],
  input  logic [4:0]        rf_rsel    [N_TILES][N_WORKERS][2],
  output logic [XLEN-1:0]   rf_rdata   [N_TILES][N_WORKERS][2],
  output logic              rf_rd_stall[N_TILES][N_WORKERS],
  // workers: ROCM port
  input  logic              w_rd_req   [N_TILES][N_WORKERS],
  input  logic              w_wr_req   [N_TILES][N_WORKERS],
  input  logic [AW-1:0]     w_addr     [N_TILES][N_WORKERS],
  input  logic [XLEN-1:0]   w_wdata    [N_TILES][N_WORKERS],
  output logic              w_rd_gnt   [N_TILES][N_WORKERS],
  output logic              w_wr_gnt   [N_TILES][N_WORKERS],
  output logic              w_rvalid   [N_TILES][N_WORKERS],
  output logic [XLEN-1:0]   w_rdata    [N_TILES][N_WORKERS],
  // workers: T-SPM port
  input  logic              w_spm_req  [N_TILES][N_WORKERS],
  input  logic              w_spm_we   [N_TILES][N_WORKERS],
  input  logic [AW-1:0]     w_spm_addr [N_TILES][N_WORKERS],
  input  logic [XLEN-1:0]   w_spm_wdata[N_TILES][N_WORKERS],
  output logic              w_spm_gnt  [N_TILES][N_WORKERS],
  output logic              w_spm_rvalid[N_TILES][N_WORKERS],
  output logic [XLEN-1:0]   spm_rdata  [N_TILES],
  // ROCM slices: L2 ports
  output logic              l2_req_valid[N_TILES][N_SLICES],
  input  logic              l2_req_ready[N_TILES][N_SLICES],
  output logic              l2_req_we   [N_TILES][N_SLICES],
  output logic [AW-1:0]     l2_req_addr [N_TILES][N_SLICES],
  output logic              l2_wvalid   [N_TILES][N_SLICES],
  output logic [L2W-1:0]    l2_wdata    [N_TILES][N_SLICES],
  input  logic              l2_rvalid   [N_TILES][N_SLICES],
  input  logic [L2W-1:0]    l2_rdata    [N_TILES][N_SLICES],
  // R2R links on the edge of the 4 x 8 worker array
  output r2r_link_t         edge_w_out [TILE_ROWS],
  input  r2r_link_t         edge_w_in  [TILE_ROWS],
  output r2r_link_t         edge_e_out [TILE_ROWS],
  input  r2r_link_t         edge_e_in  [TILE_ROWS],
  output r2r_link_t         edge_n_out [N_TILES][TILE_COLS],
  input  r2r_link_t         edge_n_in  [N_TILES][TILE_COLS],
  output r2r_link_t         edge_s_out [N_TILES][TILE_COLS],
  input  r2r_link_t         edge_s_in  [N_TILES][TILE_COLS],
  // configuration and events
  output rxb_mode_e         cfg_rxb_mode [N_TILES],
  output rocm_mode_e        cfg_rocm_mode[N_TILES],
  output logic              cfg_busy     [N_TILES],
  output logic [N_WORKERS-1:0] ev_conflict [N_TILES],
  output logic [N_SLICES-1:0]  ev_hit      [N_TILES],
  output logic [N_SLICES-1:0]  ev_miss     [N_TILES],
  output logic [N_SLICES-1:0]  ev_writeback[N_TILES]
);

  // tile-side west/east edge links
  r2r_link_t tw_out [N_TILES][TILE_ROWS];
  r2r_link_t tw_in  [N_TILES][TILE_ROWS];
  r2r_link_t te_out [N_TILES][TILE_ROWS];
  r2r_link_t te_in  [N_TILES][TILE_ROWS];

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    versa_tile u_tile (
      .clk          (clk),
      .rst_n        (rst_n),
      .mc_we        (mc_we[t]),
      .mc_re        (mc_re[t]),
      .mc_addr      (mc_addr[t]),
      .mc_wdata     (mc_wdata[t]),
      .mc_rdata     (mc_rdata[t]),
      .m_spm_req    (m_spm_req[t]),
      .m_spm_we     (m_spm_we[t]),
      .m_spm_addr   (m_spm_addr[t]),
      .m_spm_wdata  (m_spm_wdata[t]),
      .m_spm_gnt    (m_spm_gnt[t]),
      .m_spm_rvalid (m_spm_rvalid[t]),
      .rf_wen       (rf_wen[t]),
      .rf_wsel      (rf_wsel[t]),
      .rf_wdata     (rf_wdata[t]),
      .rf_wr_stall  (rf_wr_stall[t]),
      .rf_ren       (rf_ren[t]),
      .rf_rsel      (rf_rsel[t]),
      .rf_rdata     (rf_rdata[t]),
      .rf_rd_stall  (rf_rd_stall[t]),
      .w_rd_req     (w_rd_req[t]),
      .w_wr_req     (w_wr_req[t]),
      .w_addr       (w_addr[t]),
      .w_wdata      (w_wdata[t]),
      .w_rd_gnt     (w_rd_gnt[t]),
      .w_wr_gnt     (w_wr_gnt[t]),
      .w_rvalid     (w_rvalid[t]),
      .w_rdata      (w_rdata[t]),
      .w_spm_req    (w_spm_req[t]),
      .w_spm_we     (w_spm_we[t]),
      .w_spm_addr   (w_spm_addr[t]),
      .w_spm_wdata  (w_spm_wdata[t]),
      .w_spm_gnt    (w_spm_gnt[t]),
      .w_spm_rvalid (w_spm_rvalid[t]),
      .spm_rdata    (spm_rdata[t]),
      .l2_req_valid (l2_req_valid[t]),
      .l2_req_ready (l2_req_ready[t]),
      .l2_req_we    (l2_req_we[t]),
      .l2_req_addr  (l2_req_addr[t]),
      .l2_wvalid    (l2_wvalid[t]),
      .l2_wdata     (l2_wdata[t]),
      .l2_rvalid    (l2_rvalid[t]),
      .l2_rdata     (l2_rdata[t]),
      .edge_w_out   (tw_out[t]),
      .edge_w_in    (tw_in[t]),
      .edge_e_out   (te_out[t]),
      .edge_e_in    (te_in[t]),
      .edge_n_out   (edge_n_out[t]),
      .edge_n_in    (edge_n_in[t]),
      .edge_s_out   (edge_s_out[t]),
      .edge_s_in    (edge_s_in[t]),
      .cfg_rxb_mode (cfg_rxb_mode[t]),
      .cfg_rocm_mode(cfg_rocm_mode[t]),
      .cfg_busy     (cfg_busy[t]),
      .ev_conflict  (ev_conflict[t]),
      .ev_hit       (ev_hit[t]),
      .ev_miss      (ev_miss[t]),
      .ev_writeback (ev_writeback[t])
    );
  end

  // cross-tile R2R: east side of tile t <-> west side of tile t+1
  always_comb begin
    for (int r = 0; r < TILE_ROWS; r++) begin
      for (int t = 0; t < N_TILES; t++) begin
        if (t == 0) begin
          tw_in[t][r] = edge_w_in[r];
        end else begin
          tw_in[t][r] = te_out[t-1][r];
        end
        if (t == N_TILES - 1) begin
          te_in[t][r] = edge_e_in[r];
        end else begin
          te_in[t][r] = tw_out[t+1][r];
        end
      end
      edge_w_out[r] = tw_out[0][r];
      edge_e_out[r] = te_out[N_TILES-1][r];
    end
  end

  // global scratchpad on the managers' bus
  scratchpad #(.N_PORTS(N_TILES), .SIZE_BYTES(8192)) u_gspm (
    .clk    (clk),
    .rst_n  (rst_n),
    .req    (g_spm_req),
    .we     (g_spm_we),
    .addr   (g_spm_addr),
    .wdata  (g_spm_wdata),
    .gnt    (g_spm_gnt),
    .rvalid (g_spm_rvalid),
    .rdata  (g_spm_rdata)
  );

endmodule
