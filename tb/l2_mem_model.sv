// l2_mem_model: behavioural stand-in for the L2 side of the ROCM L2 ports
// (testbench only, not synthesizable).
//
// Serves N_PORTS independent 128-bit line ports over one shared backing
// store. A word that was never written reads as init_word(addr), so a test
// can predict every value. A read request is answered after LAT cycles by
// four beats of 128 bits, lowest address first; a write request is followed
// by four beats from the slice. One request per port at a time. Requests
// are ignored while rst_n is low.
module l2_mem_model #(
  parameter int unsigned N_PORTS = 1,
  parameter int unsigned LAT     = 3
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          l2_req_valid [N_PORTS],
  output logic          l2_req_ready [N_PORTS],
  input  logic          l2_req_we    [N_PORTS],
  input  logic [31:0]   l2_req_addr  [N_PORTS],
  input  logic          l2_wvalid    [N_PORTS],
  input  logic [127:0]  l2_wdata     [N_PORTS],
  output logic          l2_rvalid    [N_PORTS],
  output logic [127:0]  l2_rdata     [N_PORTS]
);

  logic [31:0] mem [logic [31:0]];
  int unsigned n_reads, n_writes;

  function automatic logic [31:0] init_word(input logic [31:0] a);
    return (a * 32'h9E37_79B1) ^ 32'h5A5A_0F0F;
  endfunction

  function automatic logic [31:0] peek(input logic [31:0] a);
    logic [31:0] wa;
    wa = {a[31:2], 2'b00};
    if (mem.exists(wa)) return mem[wa];
    return init_word(wa);
  endfunction

  initial begin
    n_reads = 0;
    n_writes = 0;
  end

  for (genvar p = 0; p < N_PORTS; p++) begin : g_port
    // 0 idle, 1 taking write beats, 2 waiting, 3 sending read beats
    int          st = 0;
    logic [31:0] base = '0;
    int          cnt = 0;

    assign l2_req_ready[p] = (st == 0);
    assign l2_rvalid[p]    = (st == 3);
    for (genvar k = 0; k < 4; k++) begin : g_word
      assign l2_rdata[p][32*k +: 32] = peek(base + 32'(16*cnt + 4*k));
    end

    always @(posedge clk) begin
      if (!rst_n) st <= 0;
      else case (st)
        0: if (l2_req_valid[p]) begin
          base <= {l2_req_addr[p][31:6], 6'b0};
          cnt  <= 0;
          if (l2_req_we[p]) begin
            st <= 1;
            n_writes++;
          end else begin
            st <= 2;
            n_reads++;
          end
        end
        1: if (l2_wvalid[p]) begin
          for (int k = 0; k < 4; k++)
            mem[base + 32'(16*cnt + 4*k)] = l2_wdata[p][32*k +: 32];
          cnt <= cnt + 1;
          if (cnt == 3) st <= 0;
        end
        2: begin
          if (cnt + 1 >= LAT) begin
            cnt <= 0;
            st  <= 3;
          end else begin
            cnt <= cnt + 1;
          end
        end
        3: begin
          cnt <= cnt + 1;
          if (cnt == 3) st <= 0;
        end
        default: st <= 0;
      endcase
    end
  end

endmodule
