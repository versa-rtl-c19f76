// tb_lrg_arbiter: compares the arbiter with a least-recently-granted
// reference kept as an ordered list (front = highest priority) under random
// request patterns, with and without the update strobe.
module tb_lrg_arbiter;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] req, gnt;
  logic         update;
  int order [N];
  int checks = 0, failures = 0;

  lrg_arbiter #(.N(N)) dut (.clk, .rst_n, .req, .update, .gnt);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] ref_gnt(input logic [N-1:0] r);
    for (int k = 0; k < N; k++)
      if (r[order[k]]) return N'(1) << order[k];
    return '0;
  endfunction

  task automatic ref_update(input int w);
    int pos;
    pos = 0;
    for (int k = 0; k < N; k++) if (order[k] == w) pos = k;
    for (int k = pos; k < N - 1; k++) order[k] = order[k+1];
    order[N-1] = w;
  endtask

  initial begin
    for (int k = 0; k < N; k++) order[k] = k;
    req = '0; update = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      req    = (cyc < 200) ? '1 : N'($urandom);
      update = ($urandom % 4) != 0;
      #1;
      checks++;
      if (gnt !== ref_gnt(req)) begin
        failures++;
        if (failures < 10) $display("FAIL cyc %0d req %b gnt %b exp %b", cyc, req, gnt, ref_gnt(req));
      end
      if (update && |req) begin
        logic [N-1:0] g;
        g = ref_gnt(req);
        for (int i = 0; i < N; i++) if (g[i]) ref_update(i);
      end
    end
    // with all requesting and update on, every requester is served once per N
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
