// tb_rxb: the reconfigurable crossbar in front of 8 real ROCM slices
// (SPM and queue modes, so no L2 traffic).
//
// Private: each worker owns slice i (the same address from two workers holds
// two different words); read latency 2. Shared: a word written by any worker
// is read by any other (all-to-all); uncontended read latency 3; when all 8
// workers hit one slice they are granted one per cycle in least-recently-
// granted order and every request completes. Queue: worker i's writes come
// out of worker i+1's reads in order (ring 7 -> 0), with all workers writing
// and reading in the same cycles. While hold is high nothing is granted.
module tb_rxb;
  import versa_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  rxb_mode_e       mode;
  rocm_mode_e      rmode;
  logic            hold, apply;
  logic            w_rd_req [N], w_wr_req [N], w_rd_gnt [N], w_wr_gnt [N], w_rvalid [N];
  logic [31:0]     w_addr [N], w_wdata [N], w_rdata [N];
  logic            s_rd_req [N], s_wr_req [N], s_rd_ready [N], s_wr_ready [N], s_rvalid [N];
  logic [31:0]     s_addr [N], s_wdata [N], s_rdata [N];
  logic [2:0]      s_id [N], s_rid [N];
  logic [N-1:0]    ev_conflict;
  logic            l2_req_valid [N], l2_req_ready [N], l2_req_we [N], l2_wvalid [N], l2_rvalid [N];
  logic [31:0]     l2_req_addr [N];
  logic [127:0]    l2_wdata [N], l2_rdata [N];
  logic [N-1:0]    ev_h, ev_m, ev_w;

  rxb #(.N(N)) dut (.clk, .rst_n, .mode, .hold,
    .w_rd_req, .w_wr_req, .w_addr, .w_wdata, .w_rd_gnt, .w_wr_gnt, .w_rvalid, .w_rdata,
    .s_rd_req, .s_wr_req, .s_addr, .s_wdata, .s_id, .s_rd_ready, .s_wr_ready,
    .s_rvalid, .s_rdata, .s_rid, .ev_conflict);

  for (genvar j = 0; j < N; j++) begin : g_s
    rocm_slice #(.SLICE_ID(3'(j))) u_s (.clk, .rst_n, .mode(rmode),
      .shared(mode == RXB_SHARED), .mode_apply(apply),
      .rd_req(s_rd_req[j]), .wr_req(s_wr_req[j]), .addr(s_addr[j]), .wdata(s_wdata[j]),
      .id(s_id[j]), .rd_ready(s_rd_ready[j]), .wr_ready(s_wr_ready[j]),
      .rvalid(s_rvalid[j]), .rdata(s_rdata[j]), .rid(s_rid[j]),
      .l2_req_valid(l2_req_valid[j]), .l2_req_ready(1'b1), .l2_req_we(l2_req_we[j]),
      .l2_req_addr(l2_req_addr[j]), .l2_wvalid(l2_wvalid[j]), .l2_wdata(l2_wdata[j]),
      .l2_rvalid(1'b0), .l2_rdata('0), .ev_hit(ev_h[j]), .ev_miss(ev_m[j]),
      .ev_writeback(ev_w[j]));
  end

  int checks = 0, failures = 0, n_conflict = 0;
  always @(posedge clk) n_conflict += $countones(ev_conflict);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
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

  task automatic idle_all();
    for (int i = 0; i < N; i++) begin
      w_rd_req[i] = 0; w_wr_req[i] = 0; w_addr[i] = 0; w_wdata[i] = 0;
    end
  endtask

  task automatic set_modes(input rxb_mode_e m, input rocm_mode_e r);
    @(negedge clk);
    mode = m; rmode = r; apply = 1;
    @(negedge clk);
    apply = 0;
  endtask

  // single worker access, returns data and latency
  task automatic wr1(input int i, input logic [31:0] a, d);
    @(negedge clk);
    w_wr_req[i] = 1; w_addr[i] = a; w_wdata[i] = d;
    #1;
    while (!w_wr_gnt[i]) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    w_wr_req[i] = 0;
  endtask

  task automatic rd1(input int i, input logic [31:0] a, output logic [31:0] d, output int lat);
    @(negedge clk);
    w_rd_req[i] = 1; w_addr[i] = a;
    #1;
    while (!w_rd_gnt[i]) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    w_rd_req[i] = 0;
    lat = 1;
    @(negedge clk);
    while (!w_rvalid[i]) begin @(negedge clk); lat++; end
    d = w_rdata[i];
  endtask

  logic [31:0] d;
  int lat;
  logic [31:0] refm [logic [31:0]];

  initial begin
    mode = RXB_PRIVATE; rmode = ROCM_SPM; hold = 0; apply = 0;
    idle_all();
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---------------- private
    for (int i = 0; i < N; i++) wr1(i, 32'h40, 32'(1000 + i));
    for (int i = 0; i < N; i++) begin
      rd1(i, 32'h40, d, lat);
      check(d, 32'(1000 + i), "private isolation");
      check(32'(lat), 32'd2, "private latency");
    end

    // ---------------- shared: all-to-all
    set_modes(RXB_SHARED, ROCM_SPM);
    for (int k = 0; k < 40; k++) begin
      logic [31:0] a;
      a = {17'd0, 15'($urandom) & 15'h7FFC};
      d = $urandom;
      refm[a] = d;
      wr1(k % N, a, d);
    end
    begin
      automatic int k = 0;
      foreach (refm[a]) begin
        rd1((k * 3 + 1) % N, a, d, lat);
        check(d, refm[a], "shared all-to-all");
        check(32'(lat), 32'd3, "shared latency");
        k++;
      end
    end

    // ---------------- shared: contention on one slice, LRG order
    begin
      automatic int order [$];
      automatic int got [N];
      automatic int cyc = 0;
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        w_rd_req[i] = 1;
        w_addr[i] = 32'h0000_0000 | (32'(i) << 9) | (32'd2 << 6);  // all slice 2
        got[i] = 0;
      end
      while (order.size() < N && cyc < 50) begin
        #1;
        for (int i = 0; i < N; i++) if (w_rd_req[i] && w_rd_gnt[i]) order.push_back(i);
        @(posedge clk); #1;
        for (int i = 0; i < N; i++) if (w_rd_req[i] && w_rd_gnt[i] === 1'b0) ; // keep asking
        foreach (order[k]) w_rd_req[order[k]] = 0;
        @(negedge clk);
        for (int i = 0; i < N; i++) if (w_rvalid[i]) got[i]++;
        cyc++;
      end
      repeat (4) begin
        @(negedge clk);
        for (int i = 0; i < N; i++) if (w_rvalid[i]) got[i]++;
      end
      check(32'(order.size()), 32'(N), "all granted");
      check(32'(cyc), 32'(N), "one grant per cycle");
      for (int i = 0; i < N; i++) check(32'(got[i]), 32'd1, "one answer each");
      // repeat: order must now be the same (each was granted once, LRG = same order)
      begin
        automatic int order2 [$];
        @(negedge clk);
        for (int i = 0; i < N; i++) w_rd_req[i] = 1;
        for (int c = 0; c < N; c++) begin
          #1;
          for (int i = 0; i < N; i++) if (w_rd_req[i] && w_rd_gnt[i]) order2.push_back(i);
          @(posedge clk); #1;
          foreach (order2[k]) w_rd_req[order2[k]] = 0;
          @(negedge clk);
        end
        idle_all();
        repeat (4) @(negedge clk);
        for (int k = 0; k < N; k++)
          check(32'(order2[k]), 32'(order[k]), "least-recently-granted order");
      end
    end
    check({31'd0, n_conflict > 0}, 1, "conflicts counted");

    // ---------------- hold: nothing is granted
    @(negedge clk);
    hold = 1; w_rd_req[0] = 1; w_addr[0] = 0;
    #1; check({31'd0, w_rd_gnt[0]}, 0, "hold blocks shared");
    @(negedge clk); hold = 0; idle_all();

    // ---------------- queue: ring of producer/consumer pairs
    set_modes(RXB_QUEUE, ROCM_QUEUE);
    begin
      automatic logic [31:0] sent [N][$];
      automatic int rx [N];
      automatic int both = 0;
      for (int i = 0; i < N; i++) rx[i] = 0;
      for (int c = 0; c < 40; c++) begin
        @(negedge clk);
        for (int i = 0; i < N; i++) begin
          w_wr_req[i] = 1; w_wdata[i] = {8'(i), 24'(c)};
          w_rd_req[i] = 1;
        end
        #1;
        for (int i = 0; i < N; i++) begin
          if (w_wr_gnt[i]) sent[i].push_back(w_wdata[i]);
          if (w_wr_gnt[i] && w_rd_gnt[(i + 1) % N]) both++;
        end
        // responses: worker i reads what worker i-1 wrote
        for (int i = 0; i < N; i++) begin
          if (w_rvalid[i]) begin
            check(w_rdata[i], sent[(i + N - 1) % N].pop_front(), "queue ring data");
            rx[i]++;
          end
        end
      end
      @(negedge clk); idle_all();
      repeat (3) begin
        #1;
        for (int i = 0; i < N; i++)
          if (w_rvalid[i]) begin
            check(w_rdata[i], sent[(i + N - 1) % N].pop_front(), "queue ring drain");
            rx[i]++;
          end
        @(negedge clk);
      end
      for (int i = 0; i < N; i++) check({31'd0, rx[i] > 30}, 1, "queue streamed");
      check({31'd0, both > 200}, 1, "split port simultaneous rd/wr");
    end
    $display("conflicts=%0d", n_conflict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
