// tb_rocm_slice: self-checking test of one ROCM slice against a reference
// memory model.
//
// SPM mode (private and shared addressing), cache mode (random reads and
// writes over 4x the slice capacity, so that misses, dirty evictions and
// write-backs happen; private and shared addressing), and queue mode (order,
// simultaneous push and pop, full and empty). Read latency must be 2 cycles
// for SPM reads, cache hits and queue pops. The L2 side is a behavioural
// memory whose never-written words are a known function of the address.
module tb_rocm_slice;
  import versa_pkg::*;
  localparam logic [2:0] SID = 3'd3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  rocm_mode_e      mode;
  logic            shared, mode_apply;
  logic            rd_req, wr_req, rd_ready, wr_ready, rvalid;
  logic [31:0]     addr, wdata, rdata;
  logic [2:0]      id, rid;
  logic            l2_req_valid [1], l2_req_ready [1], l2_req_we [1];
  logic [31:0]     l2_req_addr [1];
  logic            l2_wvalid [1], l2_rvalid [1];
  logic [127:0]    l2_wdata [1], l2_rdata [1];
  logic            ev_hit, ev_miss, ev_writeback;

  rocm_slice #(.SLICE_ID(SID)) dut (
    .clk, .rst_n, .mode, .shared, .mode_apply,
    .rd_req, .wr_req, .addr, .wdata, .id, .rd_ready, .wr_ready,
    .rvalid, .rdata, .rid,
    .l2_req_valid (l2_req_valid[0]), .l2_req_ready (l2_req_ready[0]),
    .l2_req_we (l2_req_we[0]), .l2_req_addr (l2_req_addr[0]),
    .l2_wvalid (l2_wvalid[0]), .l2_wdata (l2_wdata[0]),
    .l2_rvalid (l2_rvalid[0]), .l2_rdata (l2_rdata[0]),
    .ev_hit, .ev_miss, .ev_writeback
  );

  l2_mem_model #(.N_PORTS(1), .LAT(3)) u_l2 (
    .clk, .rst_n, .l2_req_valid, .l2_req_ready, .l2_req_we, .l2_req_addr,
    .l2_wvalid, .l2_wdata, .l2_rvalid, .l2_rdata
  );

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_wb = 0;
  always @(posedge clk) begin
    if (ev_hit) n_hit++;
    if (ev_miss) n_miss++;
    if (ev_writeback) n_wb++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
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

  task automatic wr(input logic [31:0] a, d);
    @(negedge clk);
    wr_req = 1; addr = a; wdata = d; id = 3'd5;
    #1;
    while (!wr_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    wr_req = 0;
  endtask

  // returns the data and the latency in cycles from the request cycle
  task automatic rd(input logic [31:0] a, output logic [31:0] d, output int lat,
                    output logic was_miss);
    @(negedge clk);
    rd_req = 1; addr = a; id = 3'd6;
    #1;
    while (!rd_ready) begin @(negedge clk); #1; end
    was_miss = !ev_hit && mode == ROCM_CACHE;
    @(posedge clk); #1;
    rd_req = 0;
    lat = 1;
    @(negedge clk);
    while (!rvalid) begin @(negedge clk); lat++; end
    d = rdata;
    checks++;
    if (rid !== 3'd6) begin failures++; $display("FAIL rid %0d", rid); end
  endtask

  task automatic switch_mode(input rocm_mode_e m, input logic sh);
    @(negedge clk);
    mode = m; shared = sh; mode_apply = 1;
    @(negedge clk);
    mode_apply = 0;
  endtask

  logic [31:0] refm [logic [31:0]];
  function automatic logic [31:0] ref_rd(input logic [31:0] a);
    if (refm.exists(a)) return refm[a];
    return u_l2.peek(a);
  endfunction

  logic [31:0] d, a;
  int lat;
  logic miss;
  logic [31:0] q [$];

  initial begin
    mode = ROCM_SPM; shared = 0; mode_apply = 0;
    rd_req = 0; wr_req = 0; addr = 0; wdata = 0; id = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- SPM, private addressing
    for (int i = 0; i < 64; i++) begin
      a = {20'd0, 10'($urandom), 2'b00};
      d = $urandom;
      refm[a] = d;
      wr(a, d);
    end
    foreach (refm[k]) begin
      rd(k, d, lat, miss);
      check(d, refm[k], "spm private data");
      check(32'(lat), 32'd2, "spm read latency");
    end
    refm.delete();

    // ---------------- SPM, shared addressing (slice SID of 8)
    switch_mode(ROCM_SPM, 1'b1);
    for (int i = 0; i < 64; i++) begin
      a = {17'd0, 6'($urandom), SID, 4'($urandom), 2'b00};
      d = $urandom;
      refm[a] = d;
      wr(a, d);
    end
    foreach (refm[k]) begin
      rd(k, d, lat, miss);
      check(d, refm[k], "spm shared data");
    end
    refm.delete();

    // ---------------- cache, private then shared addressing
    for (int pass = 0; pass < 2; pass++) begin
      switch_mode(ROCM_CACHE, pass == 1);
      refm.delete();
      // a cache entered fresh holds nothing: first read is a miss
      a = 32'h0001_0000 | (pass == 1 ? {23'd0, SID, 6'd0} : 32'd0);
      rd(a, d, lat, miss);
      checks++;
      if (!miss) begin failures++; $display("FAIL cache not empty after switch"); end
      check(d, ref_rd(a), "cache first read");
      for (int i = 0; i < 400; i++) begin
        // 16 KB window: 4x the slice, so lines get evicted
        a = {18'd1, 8'($urandom), 4'($urandom), 2'b00};
        if (pass == 1) a = {15'd1, 8'($urandom), SID, 4'($urandom), 2'b00};
        if ($urandom % 2) begin
          d = $urandom;
          refm[a] = d;
          wr(a, d);
        end else begin
          rd(a, d, lat, miss);
          check(d, ref_rd(a), "cache read data");
          if (!miss) check(32'(lat), 32'd2, "cache hit latency");
        end
      end
      // read everything back (dirty lines come back from L2 after eviction)
      foreach (refm[k]) begin
        rd(k, d, lat, miss);
        check(d, refm[k], "cache readback");
      end
    end
    checks++;
    if (n_hit == 0 || n_miss == 0 || n_wb == 0) begin
      failures++;
      $display("FAIL events hit=%0d miss=%0d wb=%0d", n_hit, n_miss, n_wb);
    end

    // ---------------- queue
    switch_mode(ROCM_QUEUE, 1'b0);
    checks++;
    if (rd_ready) begin failures++; $display("FAIL queue not empty after switch"); end
    for (int i = 0; i < 20; i++) begin
      d = $urandom; q.push_back(d); wr(32'hFFFF_FFFF, d);
    end
    for (int i = 0; i < 10; i++) begin
      rd(32'd0, d, lat, miss);
      check(d, q.pop_front(), "queue order");
      check(32'(lat), 32'd2, "queue pop latency");
    end
    // push and pop in the same cycles through the split port
    begin
      automatic int pops = 0, both = 0;
      logic [31:0] expq [$];
      @(negedge clk);
      for (int c = 0; c < 60; c++) begin
        rd_req = 1; wr_req = 1; wdata = $urandom;
        #1;
        if (rd_ready && wr_ready) both++;
        if (wr_ready) q.push_back(wdata);
        if (rd_ready) expq.push_back(q.pop_front());
        @(negedge clk);
        if (rvalid) begin
          check(rdata, expq.pop_front(), "queue streaming");
          pops++;
        end
      end
      rd_req = 0; wr_req = 0;
      repeat (3) begin
        @(negedge clk);
        if (rvalid) begin check(rdata, expq.pop_front(), "queue drain"); pops++; end
      end
      checks++;
      if (both < 50) begin failures++; $display("FAIL simultaneous rd/wr only %0d", both); end
    end
    // fill to full: 1024 words
    while (q.size() < 1024) begin
      d = $urandom; q.push_back(d); wr(32'd0, d);
    end
    @(negedge clk); #1;
    checks++;
    if (wr_ready) begin failures++; $display("FAIL queue not full at 1024"); end
    for (int i = 0; i < 1024; i++) begin
      rd(32'd0, d, lat, miss);
      check(d, q.pop_front(), "queue full drain");
    end
    @(negedge clk); #1;
    checks++;
    if (rd_ready) begin failures++; $display("FAIL queue not empty"); end

    $display("hits=%0d misses=%0d writebacks=%0d", n_hit, n_miss, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
