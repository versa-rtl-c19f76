// tb_r2r_shim: two R2R shims, A to the west of B, joined by one link.
//
// Checks: with R2R off s0..s3 are ordinary registers; with R2R on a write of
// A's s1 (East) is read from B's s0 (West) one cycle later; reading an empty
// link stalls the reader; writing a full link stalls the writer until the
// word is consumed; a word is consumed exactly once; s4..s31 stay local; a
// stream of words crosses at one word per 2 cycles; the reverse direction
// (B's s0 to A's s1) works the same way.
module tb_r2r_shim;
  import versa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        en_a, en_b;
  logic        wen_a, wen_b;
  logic [4:0]  wsel_a, wsel_b;
  logic [31:0] wdata_a, wdata_b;
  logic        wst_a, wst_b, rst_a, rst_b;
  logic        ren_a [2], ren_b [2];
  logic [4:0]  rsel_a [2], rsel_b [2];
  logic [31:0] rd_a [2], rd_b [2];
  r2r_link_t   out_a [4], in_a [4], out_b [4], in_b [4];
  int checks = 0, failures = 0;

  r2r_shim u_a (.clk, .rst_n, .r2r_en(en_a), .wen(wen_a), .wsel(wsel_a), .wdata(wdata_a),
                .wr_stall(wst_a), .ren(ren_a), .rsel(rsel_a), .rdata(rd_a), .rd_stall(rst_a),
                .out_link(out_a), .in_link(in_a));
  r2r_shim u_b (.clk, .rst_n, .r2r_en(en_b), .wen(wen_b), .wsel(wsel_b), .wdata(wdata_b),
                .wr_stall(wst_b), .ren(ren_b), .rsel(rsel_b), .rdata(rd_b), .rd_stall(rst_b),
                .out_link(out_b), .in_link(in_b));

  always_comb begin
    for (int d = 0; d < 4; d++) begin
      in_a[d] = '0;
      in_b[d] = '0;
    end
    in_a[DIR_E] = out_b[DIR_W];
    in_b[DIR_W] = out_a[DIR_E];
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic idle();
    wen_a = 0; wen_b = 0;
    ren_a[0] = 0; ren_a[1] = 0; ren_b[0] = 0; ren_b[1] = 0;
  endtask

  int n_wr_stall = 0, n_rd_stall = 0;
  always @(posedge clk) begin
    if (wst_a || wst_b) n_wr_stall++;
    if (rst_a || rst_b) n_rd_stall++;
  end

  initial begin
    en_a = 0; en_b = 0; idle();
    wsel_a = 0; wsel_b = 0; wdata_a = 0; wdata_b = 0;
    for (int p = 0; p < 2; p++) begin rsel_a[p] = 0; rsel_b[p] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;

    // R2R off: s1 is a local register, nothing leaves the core
    @(negedge clk);
    wen_a = 1; wsel_a = 5'd1; wdata_a = 32'h1111_0001;
    #1; check({31'd0, out_a[DIR_E].wen}, 0, "no link write when off");
    @(negedge clk); idle();
    ren_a[0] = 1; rsel_a[0] = 5'd1; #1;
    check(rd_a[0], 32'h1111_0001, "local s1 when off");
    check({31'd0, rst_a}, 0, "no stall when off");

    // R2R on
    en_a = 1; en_b = 1;
    @(negedge clk); idle();
    // reading the empty West link of B stalls
    ren_b[0] = 1; rsel_b[0] = 5'd0; #1;
    check({31'd0, rst_b}, 1, "read stall on empty link");
    // A writes s1 (East) -> goes to B
    wen_a = 1; wsel_a = 5'd1; wdata_a = 32'hDEAD_BEEF;
    #1; check({31'd0, wst_a}, 0, "first write not stalled");
    @(negedge clk);
    wen_a = 1; wdata_a = 32'h0000_0002;  // second write: link still full
    ren_b[0] = 0; #1;
    check({31'd0, wst_a}, 1, "write stall on full link");
    // A's local s1 was not written by the systolic write
    ren_a[0] = 1; rsel_a[0] = 5'd4; #1;
    // B reads s0 on both ports: same word, consumed once
    ren_b[0] = 1; ren_b[1] = 1; rsel_b[0] = 5'd0; rsel_b[1] = 5'd0; #1;
    check({31'd0, rst_b}, 0, "read allowed when valid");
    check(rd_b[0], 32'hDEAD_BEEF, "systolic read port 0");
    check(rd_b[1], 32'hDEAD_BEEF, "systolic read port 1");
    @(negedge clk);
    ren_b[0] = 0; ren_b[1] = 0; ren_a[0] = 0;
    // link freed: second write goes now
    #1; check({31'd0, wst_a}, 0, "write allowed after consume");
    @(negedge clk); wen_a = 0;
    ren_b[0] = 1; rsel_b[0] = 5'd0; #1;
    check(rd_b[0], 32'h0000_0002, "second word");
    @(negedge clk); idle();
    ren_b[0] = 1; rsel_b[0] = 5'd0; #1;
    check({31'd0, rst_b}, 1, "consumed once");
    @(negedge clk); idle();

    // s4..s31 stay local under R2R
    wen_b = 1; wsel_b = 5'd7; wdata_b = 32'h7777_7777;
    @(negedge clk); idle();
    ren_b[1] = 1; rsel_b[1] = 5'd7; #1;
    check(rd_b[1], 32'h7777_7777, "local s7");
    @(negedge clk); idle();

    // reverse direction: B writes s0 (West), A reads s1 (East)
    wen_b = 1; wsel_b = 5'd0; wdata_b = 32'h0BAD_F00D;
    @(negedge clk); idle();
    ren_a[0] = 1; rsel_a[0] = 5'd1; #1;
    check({31'd0, rst_a}, 0, "reverse read allowed");
    check(rd_a[0], 32'h0BAD_F00D, "reverse data");
    @(negedge clk); idle();

    // stream: producer writes every cycle it may, consumer reads every cycle
    begin
      automatic int sent = 0, got = 0, cyc = 0;
      while (got < 20) begin
        wen_a = (sent < 20); wsel_a = 5'd1; wdata_a = 32'(100 + sent);
        ren_b[0] = 1; rsel_b[0] = 5'd0;
        #1;
        if (!rst_b) begin check(rd_b[0], 32'(100 + got), "stream order"); got++; end
        if (wen_a && !wst_a) sent++;
        @(negedge clk); cyc++;
      end
      idle();
      // one word per 2 cycles
      check(32'(cyc), 32'd40, "stream throughput");
    end
    check({31'd0, n_wr_stall > 0 && n_rd_stall > 0}, 1, "stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
