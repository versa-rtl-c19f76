// tb_gspm: the 8 KB G-SPM shared by the 4 tile managers.
// Random reads and writes from all ports against a reference memory;
// checks one request per cycle, least-recently-granted service order under
// full contention, and a read latency of 1 cycle.
module tb_gspm;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] req, we, gnt, rvalid;
  logic [31:0]  addr [N], wdata [N];
  logic [31:0]  rdata;
  logic [31:0]  refm [2048];
  int checks = 0, failures = 0;

  scratchpad #(.N_PORTS(N), .SIZE_BYTES(8192)) dut (.clk, .rst_n, .req, .we, .addr,
                                                    .wdata, .gnt, .rvalid, .rdata);

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

  int          pend_port;
  logic [31:0] pend_exp;
  logic        pend;
  int          last [N];
  int          served [$];

  initial begin
    req = '0; we = '0; pend = 0;
    for (int i = 0; i < N; i++) begin addr[i] = 0; wdata[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise the whole array through port 0
    for (int w = 0; w < 2048; w++) begin
      @(negedge clk);
      req = 1; we = 1; addr[0] = 32'(4 * w); wdata[0] = $urandom; refm[w] = wdata[0];
    end
    @(negedge clk); req = '0; we = '0;
    // random traffic
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      // read result of last cycle's grant
      if (pend) begin
        check({31'd0, rvalid[pend_port]}, 1, "rvalid after 1 cycle");
        check(rdata, pend_exp, "read data");
      end
      pend = 0;
      for (int i = 0; i < N; i++) begin
        req[i] = $urandom % 3 != 0;
        we[i] = $urandom % 2;
        addr[i] = {19'd0, 11'($urandom), 2'b00};
        wdata[i] = $urandom;
      end
      #1;
      checks++;
      if (!$onehot(gnt) && |req) begin failures++; $display("FAIL grant %b", gnt); end
      for (int i = 0; i < N; i++) begin
        if (gnt[i]) begin
          if (we[i]) refm[addr[i][12:2]] = wdata[i];
          else begin pend = 1; pend_port = i; pend_exp = refm[addr[i][12:2]]; end
        end
      end
    end
    // all ports ask continuously: each served once in every N grants
    @(negedge clk);
    req = '1; we = '0;
    for (int c = 0; c < 3 * N; c++) begin
      #1;
      for (int i = 0; i < N; i++) if (gnt[i]) served.push_back(i);
      @(negedge clk);
    end
    req = '0;
    for (int k = N; k < served.size(); k++)
      check(32'(served[k]), 32'(served[k - N]), "LRG rotation");
    // and every port appears once among the first N grants (no starvation)
    for (int i = 0; i < N; i++) begin
      automatic int seen = 0;
      for (int k = 0; k < N && k < served.size(); k++) if (served[k] == i) seen++;
      check(32'(seen), 32'd1, "every port served once in N grants");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
