// tb_versa_tile: one compute tile with a behavioural L2 behind its 8 ROCM
// slices. The testbench plays the manager and the 8 workers.
//
// Steps: shared cache after reset (a word written by one worker is read by
// another; never-written words come from L2); a manager MODE write to
// private SPM, polled through STATUS (each worker sees its own slice); queue
// mode (worker 0 streams to worker 1); R2R enabled through mode control
// (east, south and tile-edge links); a T-SPM barrier in which every worker
// posts a flag and the manager collects them.
module tb_versa_tile;
  import versa_pkg::*;
  localparam int NW = N_WORKERS, NS = N_SLICES;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic mc_we, mc_re; logic [3:0] mc_addr; logic [31:0] mc_wdata, mc_rdata;
  logic m_spm_req, m_spm_we, m_spm_gnt, m_spm_rvalid; logic [31:0] m_spm_addr, m_spm_wdata;
  logic rf_wen [NW]; logic [4:0] rf_wsel [NW]; logic [31:0] rf_wdata [NW]; logic rf_wr_stall [NW];
  logic rf_ren [NW][2]; logic [4:0] rf_rsel [NW][2]; logic [31:0] rf_rdata [NW][2]; logic rf_rd_stall [NW];
  logic w_rd_req [NW], w_wr_req [NW], w_rd_gnt [NW], w_wr_gnt [NW], w_rvalid [NW];
  logic [31:0] w_addr [NW], w_wdata [NW], w_rdata [NW];
  logic w_spm_req [NW], w_spm_we [NW], w_spm_gnt [NW], w_spm_rvalid [NW];
  logic [31:0] w_spm_addr [NW], w_spm_wdata [NW], spm_rdata;
  logic l2_req_valid [NS], l2_req_ready [NS], l2_req_we [NS], l2_wvalid [NS], l2_rvalid [NS];
  logic [31:0] l2_req_addr [NS]; logic [127:0] l2_wdata [NS], l2_rdata [NS];
  r2r_link_t edge_w_out [4], edge_w_in [4], edge_e_out [4], edge_e_in [4];
  r2r_link_t edge_n_out [2], edge_n_in [2], edge_s_out [2], edge_s_in [2];
  rxb_mode_e cfg_rxb_mode; rocm_mode_e cfg_rocm_mode; logic cfg_busy;
  logic [7:0] ev_conflict, ev_hit, ev_miss, ev_writeback;

  versa_tile dut (.*);

  l2_mem_model #(.N_PORTS(NS), .LAT(4)) u_l2 (.clk, .rst_n, .l2_req_valid, .l2_req_ready,
    .l2_req_we, .l2_req_addr, .l2_wvalid, .l2_wdata, .l2_rvalid, .l2_rdata);

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  // ---- manager helpers
  task automatic mc_write(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); mc_we = 1; mc_addr = a; mc_wdata = d;
    @(negedge clk); mc_we = 0;
  endtask
  task automatic mc_read(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk); mc_re = 1; mc_addr = a;
    @(negedge clk); mc_re = 0; d = mc_rdata;
  endtask
  task automatic set_mode(input logic [3:0] m);
    logic [31:0] st;
    mc_write(MC_REG_MODE, {28'd0, m});
    do mc_read(MC_REG_STATUS, st); while (st[0]);
  endtask

  // ---- worker memory helpers
  task automatic wwr(input int i, input logic [31:0] a, d);
    @(negedge clk); w_wr_req[i] = 1; w_addr[i] = a; w_wdata[i] = d;
    #1; while (!w_wr_gnt[i]) begin @(negedge clk); #1; end
    @(posedge clk); #1; w_wr_req[i] = 0;
  endtask
  task automatic wrd(input int i, input logic [31:0] a, output logic [31:0] d);
    @(negedge clk); w_rd_req[i] = 1; w_addr[i] = a;
    #1; while (!w_rd_gnt[i]) begin @(negedge clk); #1; end
    @(posedge clk); #1; w_rd_req[i] = 0;
    @(negedge clk); while (!w_rvalid[i]) @(negedge clk);
    d = w_rdata[i];
  endtask

  // ---- R2R helpers (core side of the shim)
  task automatic rf_write(input int i, input logic [4:0] r, input logic [31:0] d);
    @(negedge clk); rf_wen[i] = 1; rf_wsel[i] = r; rf_wdata[i] = d;
    #1; while (rf_wr_stall[i]) begin @(negedge clk); #1; end
    @(posedge clk); #1; rf_wen[i] = 0;
  endtask
  task automatic rf_read(input int i, input logic [4:0] r, output logic [31:0] d);
    @(negedge clk); rf_ren[i][0] = 1; rf_rsel[i][0] = r;
    #1; while (rf_rd_stall[i]) begin @(negedge clk); #1; end
    d = rf_rdata[i][0];
    @(posedge clk); #1; rf_ren[i][0] = 0;
  endtask

  // ---- T-SPM helpers
  task automatic sp_wr(input int i, input logic [31:0] a, d);
    @(negedge clk); w_spm_req[i] = 1; w_spm_we[i] = 1; w_spm_addr[i] = a; w_spm_wdata[i] = d;
    #1; while (!w_spm_gnt[i]) begin @(negedge clk); #1; end
    @(posedge clk); #1; w_spm_req[i] = 0; w_spm_we[i] = 0;
  endtask
  task automatic m_rd(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk); m_spm_req = 1; m_spm_we = 0; m_spm_addr = a;
    #1; while (!m_spm_gnt) begin @(negedge clk); #1; end
    @(posedge clk); #1; m_spm_req = 0;
    @(negedge clk); d = spm_rdata;
  endtask

  logic [31:0] d;
  initial begin
    mc_we = 0; mc_re = 0; mc_addr = 0; mc_wdata = 0;
    m_spm_req = 0; m_spm_we = 0; m_spm_addr = 0; m_spm_wdata = 0;
    for (int i = 0; i < NW; i++) begin
      rf_wen[i] = 0; rf_wsel[i] = 0; rf_wdata[i] = 0;
      for (int p = 0; p < 2; p++) begin rf_ren[i][p] = 0; rf_rsel[i][p] = 0; end
      w_rd_req[i] = 0; w_wr_req[i] = 0; w_addr[i] = 0; w_wdata[i] = 0;
      w_spm_req[i] = 0; w_spm_we[i] = 0; w_spm_addr[i] = 0; w_spm_wdata[i] = 0;
    end
    for (int r = 0; r < 4; r++) begin edge_w_in[r] = '0; edge_e_in[r] = '0; end
    for (int c = 0; c < 2; c++) begin edge_n_in[c] = '0; edge_s_in[c] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;

    // shared cache (reset configuration)
    check({30'd0, cfg_rxb_mode}, {30'd0, RXB_SHARED}, "reset rxb mode");
    wwr(3, 32'h0000_1040, 32'h1234_5678);
    wrd(5, 32'h0000_1040, d);
    check(d, 32'h1234_5678, "shared cache worker 3 -> worker 5");
    wrd(6, 32'h0000_2080, d);
    check(d, u_l2.init_word(32'h0000_2080), "line filled from L2");

    // private SPM
    set_mode(4'b0101);
    check({30'd0, cfg_rxb_mode}, {30'd0, RXB_PRIVATE}, "private mode");
    for (int i = 0; i < NW; i++) wwr(i, 32'h10, 32'(i * 11));
    for (int i = 0; i < NW; i++) begin
      wrd(i, 32'h10, d);
      check(d, 32'(i * 11), "private SPM per worker");
    end

    // queue: worker 0 -> slice 1 -> worker 1
    set_mode(4'b1010);
    for (int k = 0; k < 5; k++) wwr(0, 32'h0, 32'(500 + k));
    for (int k = 0; k < 5; k++) begin
      wrd(1, 32'h0, d);
      check(d, 32'(500 + k), "queue worker 0 -> worker 1");
    end

    // R2R
    mc_write(MC_REG_R2R_EN, 32'hFF);
    rf_write(0, 5'd1, 32'hE0E0_0001);           // worker 0 East
    rf_read(1, 5'd0, d);                         // worker 1 West
    check(d, 32'hE0E0_0001, "R2R east");
    rf_write(0, 5'd3, 32'h5050_0002);           // worker 0 South
    rf_read(2, 5'd2, d);                         // worker 2 North
    check(d, 32'h5050_0002, "R2R south");
    @(negedge clk); rf_wen[2] = 1; rf_wsel[2] = 5'd0; rf_wdata[2] = 32'hAAAA_0003; #1;
    check({31'd0, edge_w_out[1].wen}, 1, "west edge wen");
    check(edge_w_out[1].wdata, 32'hAAAA_0003, "west edge data");
    @(negedge clk); rf_wen[2] = 0;
    edge_e_in[3].wen = 1; edge_e_in[3].wdata = 32'hBBBB_0004;
    @(negedge clk); edge_e_in[3].wen = 0;
    rf_read(7, 5'd1, d);                         // worker 7 (row 3, col 1) East
    check(d, 32'hBBBB_0004, "east edge into worker 7");

    // T-SPM barrier: every worker posts a flag, the manager collects
    fork
      for (int i = 0; i < NW; i++) begin
        automatic int ii = i;
        fork sp_wr(ii, 32'h100 + 32'(4 * ii), 32'd1); join_none
      end
    join
    wait fork;
    begin
      automatic int arrived = 0;
      for (int i = 0; i < NW; i++) begin
        m_rd(32'h100 + 32'(4 * i), d);
        arrived += int'(d);
      end
      check(32'(arrived), 32'(NW), "T-SPM barrier arrivals");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
