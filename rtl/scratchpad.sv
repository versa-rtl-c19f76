// scratchpad: fixed-function scratchpad shared by several requesters.
//
// Used twice in the chip: as the 8 KB tile scratchpad (T-SPM), shared by the
// tile's 8 workers and its manager, and as the 8 KB global scratchpad
// (G-SPM) on the managers' bus, shared by the 4 tile managers. It holds data
// that must survive mode changes of the ROCM (for example mutexes and
// barrier counters) and gives every requester the same short, predictable
// latency, which is what the tree-based barrier relies on.
//
// One single-ported word array; one access per cycle. Requesters that ask
// in the same cycle are served in least-recently-granted order. A request
// (req, we, byte addr, wdata) is taken in the cycle gnt is high; a read
// returns rdata with rvalid[i] in the next cycle. Writes return nothing.
//
// Follows the paper: 8 KB sizes, tile and global placement, shared manager
// and worker access at the tile level, manager-only access at the global
// level. Own choices: the arbitration order (reusing the RXB's LRG arbiter),
// single-cycle read latency and plain load/store access (no atomic
// operations; barriers use one flag word per participant).
module scratchpad
  import versa_pkg::*;
#(
  parameter int unsigned N_PORTS    = 9,
  parameter int unsigned SIZE_BYTES = 8192,
  localparam int unsigned DEPTH     = SIZE_BYTES / 4,
  localparam int unsigned WAW       = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_PORTS-1:0] req,
  input  logic [N_PORTS-1:0] we,
  input  logic [AW-1:0]      addr  [N_PORTS],
  input  logic [XLEN-1:0]    wdata [N_PORTS],
  output logic [N_PORTS-1:0] gnt,
  output logic [N_PORTS-1:0] rvalid,
  output logic [XLEN-1:0]    rdata
);

  logic [XLEN-1:0] mem [DEPTH];

  lrg_arbiter #(.N(N_PORTS)) u_arb (
    .clk    (clk),
    .rst_n  (rst_n),
    .req    (req),
    .update (1'b1),
    .gnt    (gnt)
  );

  logic [$clog2(N_PORTS)-1:0] win;
  always_comb begin
    win = '0;
    for (int i = 0; i < N_PORTS; i++)
      if (gnt[i]) win = ($clog2(N_PORTS))'(i);
  end

  logic [WAW-1:0] waddr;
  assign waddr = addr[win][WAW+1:2];

  always_ff @(posedge clk) begin
    if (|gnt && we[win]) mem[waddr] <= wdata[win];
    if (|gnt && !we[win]) rdata <= mem[waddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid <= '0;
    else        rvalid <= gnt & ~we;
  end

endmodule
