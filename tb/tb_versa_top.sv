// tb_versa_top: end-to-end test of the whole chip at its full size (4 tiles,
// 32 workers, 32 ROCM slices, G-SPM). The testbench plays the 32 worker
// cores, the 4 managers and the L2 (a behavioural memory behind all 32 L2
// ports).
//
//  1. Each manager reconfigures its tile through mode control: tile 0 shared
//     cache, tile 1 private SPM, tile 2 queue, tile 3 private cache; every
//     transition must take exactly 2 cycles. R2R is enabled on all workers.
//  2. The four tiles then run at the same time:
//       tile 0: all workers sum one shared 64-word vector (cold misses,
//               shared hits, arbitration conflicts) and post their sums,
//               which a neighbour reads back;
//       tile 1: each worker fills and reads back its private SPM slice
//               (2-cycle reads);
//       tile 2: each worker streams words to the next worker around the
//               queue ring, producers and consumers sharing slice ports;
//       tile 3: each worker walks 4x its private cache capacity, forcing
//               dirty evictions and write-backs, then reads everything back.
//  3. A systolic pipeline across the whole chip: on each of the 4 rows a
//     stream enters at the west edge, every one of the 8 workers in the row
//     reads its West register, adds its column number + 1 and writes its
//     East register; the stream leaves at the east edge having crossed all
//     four tiles, and must have gained 1 + 2 + ... + 8 = 36.
//  4. A tree barrier: workers arrive in their T-SPM, each manager gathers
//     its tile and arrives in the G-SPM, manager 0 releases the managers
//     through the G-SPM, and they release their workers through the T-SPMs.
//     No worker may leave before the last one arrived.
// Every mechanism (mode switch, RXB hold, arbitration conflict, cache hit,
// miss and write-back, private access, queue port splitting, R2R transfer,
// R2R read and write stall, cross-tile R2R, T-SPM and G-SPM barrier stage)
// is counted, and one that never happened counts as a failure.
module tb_versa_top;
  import versa_pkg::*;
  localparam int NT = N_TILES, NW = N_WORKERS, NS = N_SLICES;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic mc_we [NT], mc_re [NT]; logic [3:0] mc_addr [NT]; logic [31:0] mc_wdata [NT], mc_rdata [NT];
  logic m_spm_req [NT], m_spm_we [NT], m_spm_gnt [NT], m_spm_rvalid [NT];
  logic [31:0] m_spm_addr [NT], m_spm_wdata [NT];
  logic [NT-1:0] g_spm_req, g_spm_we, g_spm_gnt, g_spm_rvalid;
  logic [31:0] g_spm_addr [NT], g_spm_wdata [NT], g_spm_rdata;
  logic rf_wen [NT][NW]; logic [4:0] rf_wsel [NT][NW]; logic [31:0] rf_wdata [NT][NW];
  logic rf_wr_stall [NT][NW];
  logic rf_ren [NT][NW][2]; logic [4:0] rf_rsel [NT][NW][2]; logic [31:0] rf_rdata [NT][NW][2];
  logic rf_rd_stall [NT][NW];
  logic w_rd_req [NT][NW], w_wr_req [NT][NW], w_rd_gnt [NT][NW], w_wr_gnt [NT][NW], w_rvalid [NT][NW];
  logic [31:0] w_addr [NT][NW], w_wdata [NT][NW], w_rdata [NT][NW];
  logic w_spm_req [NT][NW], w_spm_we [NT][NW], w_spm_gnt [NT][NW], w_spm_rvalid [NT][NW];
  logic [31:0] w_spm_addr [NT][NW], w_spm_wdata [NT][NW], spm_rdata [NT];
  logic l2_req_valid [NT][NS], l2_req_ready [NT][NS], l2_req_we [NT][NS];
  logic l2_wvalid [NT][NS], l2_rvalid [NT][NS];
  logic [31:0] l2_req_addr [NT][NS]; logic [127:0] l2_wdata [NT][NS], l2_rdata [NT][NS];
  r2r_link_t edge_w_out [4], edge_w_in [4], edge_e_out [4], edge_e_in [4];
  r2r_link_t edge_n_out [NT][2], edge_n_in [NT][2], edge_s_out [NT][2], edge_s_in [NT][2];
  rxb_mode_e cfg_rxb_mode [NT]; rocm_mode_e cfg_rocm_mode [NT]; logic cfg_busy [NT];
  logic [7:0] ev_conflict [NT], ev_hit [NT], ev_miss [NT], ev_writeback [NT];

  versa_top dut (.*);

  // L2 stand-in: flatten the [tile][slice] ports
  localparam int NP = NT * NS;
  logic f_req_valid [NP], f_req_ready [NP], f_req_we [NP], f_wvalid [NP], f_rvalid [NP];
  logic [31:0] f_req_addr [NP]; logic [127:0] f_wdata [NP], f_rdata [NP];
  always_comb begin
    for (int t = 0; t < NT; t++)
      for (int s = 0; s < NS; s++) begin
        f_req_valid[t*NS+s] = l2_req_valid[t][s];
        f_req_we[t*NS+s]    = l2_req_we[t][s];
        f_req_addr[t*NS+s]  = l2_req_addr[t][s];
        f_wvalid[t*NS+s]    = l2_wvalid[t][s];
        f_wdata[t*NS+s]     = l2_wdata[t][s];
        l2_req_ready[t][s]  = f_req_ready[t*NS+s];
        l2_rvalid[t][s]     = f_rvalid[t*NS+s];
        l2_rdata[t][s]      = f_rdata[t*NS+s];
      end
  end
  l2_mem_model #(.N_PORTS(NP), .LAT(6)) u_l2 (.clk, .rst_n,
    .l2_req_valid(f_req_valid), .l2_req_ready(f_req_ready), .l2_req_we(f_req_we),
    .l2_req_addr(f_req_addr), .l2_wvalid(f_wvalid), .l2_wdata(f_wdata),
    .l2_rvalid(f_rvalid), .l2_rdata(f_rdata));

  // ------------------------------------------------------------ bookkeeping
  int checks = 0, failures = 0;
  int cyc = 0;
  int n_switch = 0, n_hold = 0, n_conflict = 0, n_hit = 0, n_miss = 0, n_wb = 0;
  int n_private = 0, n_split = 0, n_r2r = 0, n_r2r_rd_stall = 0, n_r2r_wr_stall = 0;
  int n_cross = 0, n_tspm_stage = 0, n_gspm_stage = 0;
  logic busy_q [NT];

  always @(posedge clk) begin
    cyc++;
    for (int t = 0; t < NT; t++) begin
      if (rst_n && cfg_busy[t] && !busy_q[t]) n_switch++;
      if (cfg_busy[t]) n_hold++;
      busy_q[t] = cfg_busy[t];
      n_conflict += $countones(ev_conflict[t]);
      n_hit      += $countones(ev_hit[t]);
      n_miss     += $countones(ev_miss[t]);
      n_wb       += $countones(ev_writeback[t]);
      for (int w = 0; w < NW; w++) begin
        if (cfg_rxb_mode[t] == RXB_PRIVATE &&
            ((w_rd_req[t][w] && w_rd_gnt[t][w]) || (w_wr_req[t][w] && w_wr_gnt[t][w])))
          n_private++;
        // queue mode: worker w writes slice w+1 while worker w+1 reads it
        if (cfg_rxb_mode[t] == RXB_QUEUE && w_wr_req[t][w] && w_wr_gnt[t][w] &&
            w_rd_req[t][(w+1)%NW] && w_rd_gnt[t][(w+1)%NW])
          n_split++;
        if (rf_rd_stall[t][w]) n_r2r_rd_stall++;
        if (rf_wr_stall[t][w]) n_r2r_wr_stall++;
        if (rf_wen[t][w] && !rf_wr_stall[t][w] && rf_wsel[t][w] < 5'd4) n_r2r++;
      end
    end
    for (int t = 0; t < NT - 1; t++)
      for (int r = 0; r < 4; r++)
        if (dut.te_out[t][r].wen) n_cross++;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  // ---------------------------------------------------------- manager side
  task automatic mc_write(input int t, input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); mc_we[t] = 1; mc_addr[t] = a; mc_wdata[t] = d;
    @(negedge clk); mc_we[t] = 0;
  endtask

  // MODE write, then check the transition takes exactly 2 cycles
  task automatic set_mode(input int t, input logic [3:0] m, input rxb_mode_e er);
    int n;
    mc_write(t, MC_REG_MODE, {28'd0, m});
    n = 0;
    while (cfg_busy[t]) begin n++; @(negedge clk); end
    check(32'(n), 32'd2, "mode transition cycles");
    check({30'd0, cfg_rxb_mode[t]}, {30'd0, er}, "mode applied");
  endtask

  task automatic m_tspm(input int t, input logic we, input logic [31:0] a, d,
                        output logic [31:0] q);
    @(negedge clk); m_spm_req[t] = 1; m_spm_we[t] = we; m_spm_addr[t] = a; m_spm_wdata[t] = d;
    #1; while (!m_spm_gnt[t]) begin @(negedge clk); #1; end
    @(posedge clk); #1; m_spm_req[t] = 0; m_spm_we[t] = 0;
    @(negedge clk); q = spm_rdata[t];
  endtask

  task automatic m_gspm(input int t, input logic we, input logic [31:0] a, d,
                        output logic [31:0] q);
    @(negedge clk); g_spm_req[t] = 1; g_spm_we[t] = we; g_spm_addr[t] = a; g_spm_wdata[t] = d;
    #1; while (!g_spm_gnt[t]) begin @(negedge clk); #1; end
    @(posedge clk); #1; g_spm_req[t] = 0; g_spm_we[t] = 0;
    @(negedge clk); q = g_spm_rdata;
  endtask

  // ----------------------------------------------------------- worker side
  task automatic wwr(input int t, w, input logic [31:0] a, d);
    @(negedge clk); w_wr_req[t][w] = 1; w_addr[t][w] = a; w_wdata[t][w] = d;
    #1; while (!w_wr_gnt[t][w]) begin @(negedge clk); #1; end
    @(posedge clk); #1; w_wr_req[t][w] = 0;
  endtask

  task automatic wrd(input int t, w, input logic [31:0] a, output logic [31:0] d,
                     output int lat);
    @(negedge clk); w_rd_req[t][w] = 1; w_addr[t][w] = a;
    #1; while (!w_rd_gnt[t][w]) begin @(negedge clk); #1; end
    @(posedge clk); #1; w_rd_req[t][w] = 0;
    lat = 1;
    @(negedge clk);
    while (!w_rvalid[t][w]) begin @(negedge clk); lat++; end
    d = w_rdata[t][w];
  endtask

  task automatic w_tspm(input int t, w, input logic we, input logic [31:0] a, d,
                        output logic [31:0] q);
    @(negedge clk); w_spm_req[t][w] = 1; w_spm_we[t][w] = we; w_spm_addr[t][w] = a;
    w_spm_wdata[t][w] = d;
    #1; while (!w_spm_gnt[t][w]) begin @(negedge clk); #1; end
    @(posedge clk); #1; w_spm_req[t][w] = 0; w_spm_we[t][w] = 0;
    @(negedge clk); q = spm_rdata[t];
  endtask

  task automatic rf_write(input int t, w, input logic [4:0] r, input logic [31:0] d);
    @(negedge clk); rf_wen[t][w] = 1; rf_wsel[t][w] = r; rf_wdata[t][w] = d;
    #1; while (rf_wr_stall[t][w]) begin @(negedge clk); #1; end
    @(posedge clk); #1; rf_wen[t][w] = 0;
  endtask

  task automatic rf_read(input int t, w, input logic [4:0] r, output logic [31:0] d);
    @(negedge clk); rf_ren[t][w][0] = 1; rf_rsel[t][w][0] = r;
    #1; while (rf_rd_stall[t][w]) begin @(negedge clk); #1; end
    d = rf_rdata[t][w][0];
    @(posedge clk); #1; rf_ren[t][w][0] = 0;
  endtask

  // ------------------------------------------------------- tile workloads
  localparam logic [31:0] VEC = 32'h0004_0000;   // shared vector, tile 0
  localparam logic [31:0] RES = 32'h0004_1000;   // per-worker sums, tile 0

  task automatic tile0_worker(input int w);
    logic [31:0] d, sum, exp;
    int lat;
    sum = 0; exp = 0;
    for (int k = 0; k < 64; k++) begin
      automatic int kk = (k + 8 * w) % 64;     // start at different words
      wrd(0, w, VEC + 32'(4 * kk), d, lat);
      check(d, u_l2.init_word(VEC + 32'(4 * kk)), "tile0 shared vector");
      sum += d;
      exp += u_l2.init_word(VEC + 32'(4 * kk));
    end
    wwr(0, w, RES + 32'(64 * w), sum);
    check(sum, exp, "tile0 sum");
  endtask

  task automatic tile1_worker(input int w);
    logic [31:0] d;
    int lat;
    for (int k = 0; k < 32; k++) wwr(1, w, 32'(4 * (k * 29 % 1024)), 32'((w << 16) | k));
    for (int k = 0; k < 32; k++) begin
      wrd(1, w, 32'(4 * (k * 29 % 1024)), d, lat);
      check(d, 32'((w << 16) | k), "tile1 private SPM");
      check(32'(lat), 32'd2, "tile1 private read latency");
    end
  endtask

  // tile 2: worker w writes 16 words to w+1 and reads 16 from w-1, at once
  task automatic tile2_producer(input int w);
    for (int k = 0; k < 16; k++) wwr(2, w, 32'd0, 32'((w << 8) | k));
  endtask

  task automatic tile2_consumer(input int w);
    logic [31:0] d;
    int lat;
    for (int k = 0; k < 16; k++) begin
      wrd(2, w, 32'd0, d, lat);
      check(d, 32'((((w + NW - 1) % NW) << 8) | k), "tile2 queue ring");
    end
  endtask

  task automatic tile3_worker(input int w);
    logic [31:0] d;
    int lat;
    // 16 KB window = 4x the private 4 KB cache: dirty lines get evicted
    for (int k = 0; k < 64; k++)
      wwr(3, w, 32'h0100_0000 + 32'(w << 16) + 32'(256 * k + 4 * (k % 16)), 32'(w * 1000 + k));
    for (int k = 0; k < 64; k++) begin
      wrd(3, w, 32'h0100_0000 + 32'(w << 16) + 32'(256 * k + 4 * (k % 16)), d, lat);
      check(d, 32'(w * 1000 + k), "tile3 private cache readback");
    end
  endtask

  // ------------------------------------------------------- systolic stage
  localparam int NSTREAM = 8;
  task automatic systolic_worker(input int t, w);
    logic [31:0] d;
    automatic int col = t * TILE_COLS + (w % TILE_COLS);
    for (int k = 0; k < NSTREAM; k++) begin
      rf_read(t, w, 5'd0, d);                  // s0 = West
      rf_write(t, w, 5'd1, d + 32'(col + 1));  // s1 = East
    end
  endtask

  // tb acts as the west neighbour of column 0 and east neighbour of column 7
  task automatic west_source(input int r);
    for (int k = 0; k < NSTREAM; k++) begin
      @(negedge clk);
      edge_w_in[r].wen = 1; edge_w_in[r].wdata = 32'(1000 * (r + 1) + k);
      @(negedge clk);
      edge_w_in[r].wen = 0;
      // wait until the worker consumed the word (its rden on the link)
      #1; while (!edge_w_out[r].rden) begin @(negedge clk); #1; end
    end
  endtask

  task automatic east_sink(input int r);
    @(negedge clk);
    for (int k = 0; k < NSTREAM; k++) begin
      #1; while (!edge_e_out[r].wen) begin @(negedge clk); #1; end
      check(edge_e_out[r].wdata, 32'(1000 * (r + 1) + k + 36), "systolic row output");
      // a slow consumer: back-pressure travels west along the row
      repeat (6) @(negedge clk);
      edge_e_in[r].rden = 1;
      @(negedge clk);
      edge_e_in[r].rden = 0;
    end
  endtask

  // -------------------------------------------------------- tree barrier
  int arrive_cyc [NT][NW], leave_cyc [NT][NW];
  localparam logic [31:0] EPOCH = 32'd7;

  task automatic barrier_worker(input int t, w);
    logic [31:0] q;
    repeat ($urandom % 40) @(negedge clk);        // uneven arrival
    w_tspm(t, w, 1, 32'h100 + 32'(4 * w), EPOCH, q);
    arrive_cyc[t][w] = cyc;
    do w_tspm(t, w, 0, 32'h200, 0, q); while (q != EPOCH);
    leave_cyc[t][w] = cyc;
  endtask

  task automatic barrier_manager(input int t);
    logic [31:0] q;
    // gather the tile (serial section of the tile level)
    for (int w = 0; w < NW; w++) begin
      do m_tspm(t, 0, 32'h100 + 32'(4 * w), 0, q); while (q != EPOCH);
    end
    n_tspm_stage++;
    // arrive at the global level
    m_gspm(t, 1, 32'h10 + 32'(4 * t), EPOCH, q);
    if (t == 0) begin
      for (int u = 0; u < NT; u++) begin
        do m_gspm(t, 0, 32'h10 + 32'(4 * u), 0, q); while (q != EPOCH);
      end
      n_gspm_stage++;
      m_gspm(t, 1, 32'h40, EPOCH, q);
    end else begin
      do m_gspm(t, 0, 32'h40, 0, q); while (q != EPOCH);
    end
    // release the tile
    m_tspm(t, 1, 32'h200, EPOCH, q);
  endtask

  // -------------------------------------------------------------- main
  logic [31:0] d;
  int lat;
  initial begin
    for (int t = 0; t < NT; t++) begin
      mc_we[t] = 0; mc_re[t] = 0; mc_addr[t] = 0; mc_wdata[t] = 0;
      m_spm_req[t] = 0; m_spm_we[t] = 0; m_spm_addr[t] = 0; m_spm_wdata[t] = 0;
      g_spm_addr[t] = 0; g_spm_wdata[t] = 0; busy_q[t] = 0;
      for (int c = 0; c < 2; c++) begin edge_n_in[t][c] = '0; edge_s_in[t][c] = '0; end
      for (int w = 0; w < NW; w++) begin
        rf_wen[t][w] = 0; rf_wsel[t][w] = 0; rf_wdata[t][w] = 0;
        for (int p = 0; p < 2; p++) begin rf_ren[t][w][p] = 0; rf_rsel[t][w][p] = 0; end
        w_rd_req[t][w] = 0; w_wr_req[t][w] = 0; w_addr[t][w] = 0; w_wdata[t][w] = 0;
        w_spm_req[t][w] = 0; w_spm_we[t][w] = 0; w_spm_addr[t][w] = 0; w_spm_wdata[t][w] = 0;
      end
    end
    g_spm_req = '0; g_spm_we = '0;
    for (int r = 0; r < 4; r++) begin edge_w_in[r] = '0; edge_e_in[r] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. configuration, all managers at once
    fork
      set_mode(0, 4'b0000, RXB_SHARED);
      set_mode(1, 4'b0101, RXB_PRIVATE);
      set_mode(2, 4'b1010, RXB_QUEUE);
      set_mode(3, 4'b0001, RXB_PRIVATE);
    join
    for (int t = 0; t < NT; t++) mc_write(t, MC_REG_R2R_EN, 32'hFF);
    check({30'd0, cfg_rocm_mode[1]}, {30'd0, ROCM_SPM}, "tile1 ROCM SPM");
    check({30'd0, cfg_rocm_mode[3]}, {30'd0, ROCM_CACHE}, "tile3 ROCM cache");
    $display("[%0d] configured", cyc);

    // 2. tile workloads in parallel
    for (int w = 0; w < NW; w++) begin
      automatic int ww = w;
      fork
        tile0_worker(ww);
        tile1_worker(ww);
        tile2_producer(ww);
        tile2_consumer(ww);
        tile3_worker(ww);
      join_none
    end
    wait fork;
    // neighbours read back the posted sums
    for (int w = 0; w < NW; w++) begin
      logic [31:0] exp;
      exp = 0;
      for (int k = 0; k < 64; k++) exp += u_l2.init_word(VEC + 32'(4 * k));
      wrd(0, (w + 1) % NW, RES + 32'(64 * w), d, lat);
      check(d, exp, "tile0 posted sum");
    end
    // an uncontended shared-mode hit takes 3 cycles
    wrd(0, 0, VEC, d, lat);
    check(32'(lat), 32'd3, "shared hit latency");
    $display("[%0d] tile workloads done", cyc);

    // 3. chip-wide systolic pipeline
    for (int t = 0; t < NT; t++)
      for (int w = 0; w < NW; w++) begin
        automatic int tt = t, ww = w;
        fork systolic_worker(tt, ww); join_none
      end
    for (int r = 0; r < 4; r++) begin
      automatic int rr = r;
      fork west_source(rr); east_sink(rr); join_none
    end
    wait fork;
    $display("[%0d] systolic pipeline done", cyc);

    // 4. tree barrier
    for (int t = 0; t < NT; t++) begin
      automatic int tt = t;
      fork barrier_manager(tt); join_none
      for (int w = 0; w < NW; w++) begin
        automatic int ww = w;
        fork barrier_worker(tt, ww); join_none
      end
    end
    wait fork;
    begin
      automatic int last_arrive = 0, first_leave = 1 << 30;
      for (int t = 0; t < NT; t++)
        for (int w = 0; w < NW; w++) begin
          if (arrive_cyc[t][w] > last_arrive) last_arrive = arrive_cyc[t][w];
          if (leave_cyc[t][w] < first_leave) first_leave = leave_cyc[t][w];
        end
      check({31'd0, first_leave > last_arrive}, 1, "barrier: nobody leaves early");
      $display("[%0d] barrier: last arrival %0d, first release %0d", cyc, last_arrive, first_leave);
    end

    // mechanism coverage
    $display("switches=%0d hold=%0d conflicts=%0d hits=%0d misses=%0d writebacks=%0d",
             n_switch, n_hold, n_conflict, n_hit, n_miss, n_wb);
    $display("private=%0d split=%0d r2r=%0d r2r_rd_stall=%0d r2r_wr_stall=%0d cross_tile=%0d tspm=%0d gspm=%0d",
             n_private, n_split, n_r2r, n_r2r_rd_stall, n_r2r_wr_stall, n_cross,
             n_tspm_stage, n_gspm_stage);
    check({31'd0, n_switch >= 4},      1, "mode switch happened");
    check({31'd0, n_hold > 0},         1, "RXB hold happened");
    check({31'd0, n_conflict > 0},     1, "arbitration conflict happened");
    check({31'd0, n_hit > 0},          1, "cache hit happened");
    check({31'd0, n_miss > 0},         1, "cache miss happened");
    check({31'd0, n_wb > 0},           1, "write-back happened");
    check({31'd0, n_private > 0},      1, "private access happened");
    check({31'd0, n_split > 0},        1, "queue port split happened");
    check({31'd0, n_r2r >= 32 * NSTREAM}, 1, "R2R transfers happened");
    check({31'd0, n_r2r_rd_stall > 0}, 1, "R2R read stall happened");
    check({31'd0, n_r2r_wr_stall > 0}, 1, "R2R write stall happened");
    check(32'(n_cross), 32'(3 * 4 * NSTREAM), "cross-tile R2R transfers");
    check(32'(n_tspm_stage), 32'(NT), "T-SPM barrier stages");
    check(32'(n_gspm_stage), 32'd1, "G-SPM barrier stage");
    $display("cycles=%0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
