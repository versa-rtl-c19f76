// tb_sram_1r1w: checks the ROCM sub-bank model: data written is read back,
// the read port has one cycle of latency, and a read and a write to the
// same row in one cycle return the old word.
module tb_sram_1r1w;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        we, re;
  logic [7:0]  waddr, raddr;
  logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [256];
  int checks = 0, failures = 0;

  sram_1r1w dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

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

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    // fill every row
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      we = 1; waddr = 8'(i); wdata = $urandom; ref_mem[i] = wdata;
    end
    @(negedge clk); we = 0;
    // read back, data must appear exactly one edge later
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      re = 1; raddr = 8'(255 - i);
      @(posedge clk); #1;
      check(rdata, ref_mem[255 - i], "readback");
    end
    // read-during-write returns the old word
    @(negedge clk);
    we = 1; waddr = 8'd17; wdata = 32'hCAFE_F00D; re = 1; raddr = 8'd17;
    @(posedge clk); #1;
    check(rdata, ref_mem[17], "read during write");
    @(negedge clk); we = 0;
    @(posedge clk); #1;
    check(rdata, 32'hCAFE_F00D, "after write");
    // disabled read port holds its output
    @(negedge clk); re = 0; raddr = 8'd3;
    @(posedge clk); #1;
    check(rdata, 32'hCAFE_F00D, "hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
