// tb_mode_ctrl: checks the memory-mapped mode registers: a MODE write takes
// effect exactly 2 cycles later with busy high for those 2 cycles and apply
// in the second, queue requests force both RXB and ROCM to queue mode, the
// R2R enables and STATUS read back.
module tb_mode_ctrl;
  import versa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        mc_we, mc_re;
  logic [3:0]  mc_addr;
  logic [31:0] mc_wdata, mc_rdata;
  rxb_mode_e   rxb_mode;
  rocm_mode_e  rocm_mode;
  logic [7:0]  r2r_en;
  logic        busy, apply;
  int checks = 0, failures = 0;

  mode_ctrl dut (.clk, .rst_n, .mc_we, .mc_re, .mc_addr, .mc_wdata, .mc_rdata,
                 .rxb_mode, .rocm_mode, .r2r_en, .busy, .apply);

  initial begin
    repeat (2000) @(posedge clk);
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

  // write MODE and follow the transition cycle by cycle
  task automatic set_mode(input logic [3:0] val, input rxb_mode_e er, input rocm_mode_e eo);
    rxb_mode_e  old_r;
    rocm_mode_e old_o;
    @(negedge clk);
    old_r = rxb_mode; old_o = rocm_mode;
    mc_we = 1; mc_addr = MC_REG_MODE; mc_wdata = {28'd0, val};
    @(negedge clk);   // cycle t+1
    mc_we = 0;
    check({31'd0, busy}, 1, "busy t+1");
    check({31'd0, apply}, 0, "apply t+1");
    check({30'd0, rxb_mode}, {30'd0, old_r}, "old rxb mode held t+1");
    @(negedge clk);   // cycle t+2
    check({31'd0, busy}, 1, "busy t+2");
    check({31'd0, apply}, 1, "apply t+2");
    check({30'd0, rocm_mode}, {30'd0, old_o}, "old rocm mode held t+2");
    @(negedge clk);   // cycle t+3
    check({31'd0, busy}, 0, "busy done");
    check({30'd0, rxb_mode}, {30'd0, er}, "new rxb mode");
    check({30'd0, rocm_mode}, {30'd0, eo}, "new rocm mode");
  endtask

  task automatic rd_reg(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk);
    mc_re = 1; mc_addr = a;
    @(negedge clk);
    mc_re = 0;
    d = mc_rdata;
  endtask

  logic [31:0] d;
  initial begin
    mc_we = 0; mc_re = 0; mc_addr = 0; mc_wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check({30'd0, rxb_mode}, {30'd0, RXB_SHARED}, "reset rxb");
    check({30'd0, rocm_mode}, {30'd0, ROCM_CACHE}, "reset rocm");
    set_mode(4'b0101, RXB_PRIVATE, ROCM_SPM);
    set_mode(4'b0001, RXB_PRIVATE, ROCM_CACHE);
    set_mode(4'b0100, RXB_SHARED, ROCM_SPM);
    set_mode(4'b0010, RXB_QUEUE, ROCM_QUEUE);   // queue crossbar forces queue ROCM
    set_mode(4'b0000, RXB_SHARED, ROCM_CACHE);
    set_mode(4'b1000, RXB_QUEUE, ROCM_QUEUE);   // queue ROCM forces queue crossbar
    rd_reg(MC_REG_MODE, d);
    check(d, {28'd0, ROCM_QUEUE, RXB_QUEUE}, "MODE readback");
    // STATUS reads busy during a transition
    @(negedge clk);
    mc_we = 1; mc_addr = MC_REG_MODE; mc_wdata = 32'h5;
    @(negedge clk);
    mc_we = 0; mc_re = 1; mc_addr = MC_REG_STATUS;
    @(negedge clk);
    mc_re = 0;
    check(mc_rdata, 32'd1, "STATUS busy");
    repeat (2) @(negedge clk);
    rd_reg(MC_REG_STATUS, d);
    check(d, 32'd0, "STATUS idle");
    // R2R enables apply on the next cycle
    @(negedge clk);
    mc_we = 1; mc_addr = MC_REG_R2R_EN; mc_wdata = 32'hA5;
    @(negedge clk);
    mc_we = 0;
    check({24'd0, r2r_en}, 32'hA5, "r2r_en");
    rd_reg(MC_REG_R2R_EN, d);
    check(d, 32'hA5, "R2R_EN readback");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
