// sram_1r1w: one 32-bit sub-bank of an L1-ROCM slice.
//
// The paper builds every ROCM slice from four 32-bit wide 1R1W SRAM banks so
// that a narrow worker access only toggles one bank while a 128-bit line fill
// writes all four. This model is a synthesizable array with one synchronous
// write port and one synchronous read port: a read issued in cycle t returns
// its word in cycle t+1 (rdata is the registered array output). A read and a
// write to the same row in the same cycle return the old word. The array is
// not reset. Depth and width defaults (256 x 32 = 1 KB) follow the paper's
// 4 KB slice split into four banks.
module sram_1r1w #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
