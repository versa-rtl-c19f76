// rxb: reconfigurable crossbar (RXB) between the 8 workers and 8 ROCM slices
// of a tile.
//
// Every worker and every slice has one bidirectional port made of rd_req,
// wr_req, addr, wdata going down and rd/wr grants and read data coming up.
// The manager selects one of three modes:
//
//  * RXB_SHARED: all-to-all. A request goes to slice addr[8:6] (the tile's
//    32 KB of slices are interleaved on 64-byte lines). Each slice has its own
//    least-recently-granted arbiter and one pipeline register: the winner is
//    granted in the cycle it asks and its request reaches the slice in the
//    next cycle (1-cycle pipelined arbitration). Read data comes back tagged
//    with the requester's number and is steered to it.
//  * RXB_PRIVATE: crosspoints are locked so that worker i talks only to slice
//    i, in both directions, combinationally: no arbitration cycle.
//  * RXB_QUEUE: slice j is a FIFO from worker j-1 (producer) to worker j
//    (consumer), ring order. The slice port is split: the producer's write
//    and the consumer's read use it in the same cycle. A worker writes into
//    slice i+1 and reads from slice i; addresses are ignored.
//
// Timing: in private and queue mode a request is handed to the slice in the
// cycle it is granted; in shared mode one cycle later. With the 2-cycle slice
// read this gives a read latency of 2 cycles private and 3 cycles shared,
// the 33% reduction the paper reports. While `hold` is high (a mode change is
// in progress) no new request is granted.
//
// Follows the paper: the three modes, LRG arbitration with 1-cycle pipelined
// arbitration in shared mode, 0-cycle locked ports in private mode, port
// splitting in queue mode. Own choices: the line interleaving in shared mode,
// the producer/consumer numbering of the queue ring (read from the figure's
// crosspoint labels "7/0", "0/1", ... over slices 0, 1, ...), and that a
// worker has at most one read outstanding.
module rxb
  import versa_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  rxb_mode_e       mode,
  input  logic            hold,
  // worker side
  input  logic            w_rd_req  [N],
  input  logic            w_wr_req  [N],
  input  logic [AW-1:0]   w_addr    [N],
  input  logic [XLEN-1:0] w_wdata   [N],
  output logic            w_rd_gnt  [N],
  output logic            w_wr_gnt  [N],
  output logic            w_rvalid  [N],
  output logic [XLEN-1:0] w_rdata   [N],
  // slice side
  output logic            s_rd_req  [N],
  output logic            s_wr_req  [N],
  output logic [AW-1:0]   s_addr    [N],
  output logic [XLEN-1:0] s_wdata   [N],
  output logic [2:0]      s_id      [N],
  input  logic            s_rd_ready[N],
  input  logic            s_wr_ready[N],
  input  logic            s_rvalid  [N],
  input  logic [XLEN-1:0] s_rdata   [N],
  input  logic [2:0]      s_rid     [N],
  // statistics: worker i asked in shared mode and lost arbitration
  output logic [N-1:0]    ev_conflict
);

  localparam int unsigned SW = $clog2(N);

  // ------------------------------------------------ shared-mode arbitration
  logic [N-1:0] arb_req [N];   // [slice][worker]
  logic [N-1:0] arb_gnt [N];
  logic [N-1:0] can_load;

  // per-slice pipeline register
  logic            st_valid [N];
  logic            st_we    [N];
  logic [AW-1:0]   st_addr  [N];
  logic [XLEN-1:0] st_wdata [N];
  logic [2:0]      st_id    [N];

  logic is_shared;
  assign is_shared = (mode == RXB_SHARED);

  always_comb begin
    for (int j = 0; j < N; j++) begin
      for (int i = 0; i < N; i++) begin
        arb_req[j][i] = is_shared && !hold && (w_rd_req[i] || w_wr_req[i]) &&
                        (w_addr[i][6 +: SW] == SW'(j));
      end
      can_load[j] = !st_valid[j] ||
                    (st_we[j] ? s_wr_ready[j] : s_rd_ready[j]);
    end
  end

  for (genvar j = 0; j < N; j++) begin : g_arb
    lrg_arbiter #(.N(N)) u_arb (
      .clk    (clk),
      .rst_n  (rst_n),
      .req    (arb_req[j]),
      .update (can_load[j]),
      .gnt    (arb_gnt[j])
    );
  end

  // granted worker of each slice, and whether each worker won this cycle
  logic [N-1:0] sh_gnt;        // per worker
  logic [SW-1:0] win [N];      // per slice
  always_comb begin
    sh_gnt = '0;
    for (int j = 0; j < N; j++) begin
      win[j] = '0;
      for (int i = 0; i < N; i++) begin
        if (arb_gnt[j][i]) begin
          win[j] = SW'(i);
          if (can_load[j]) sh_gnt[i] = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N; j++) begin
        st_valid[j] <= 1'b0;
        st_we[j]    <= 1'b0;
        st_addr[j]  <= '0;
        st_wdata[j] <= '0;
        st_id[j]    <= '0;
      end
    end else begin
      for (int j = 0; j < N; j++) begin
        if (!is_shared) begin
          st_valid[j] <= 1'b0;
        end else if (can_load[j]) begin
          st_valid[j] <= |arb_gnt[j];
          if (|arb_gnt[j]) begin
            st_we[j]    <= w_wr_req[win[j]];
            st_addr[j]  <= w_addr[win[j]];
            st_wdata[j] <= w_wdata[win[j]];
            st_id[j]    <= 3'(win[j]);
          end
        end
      end
    end
  end

  // ------------------------------------------------------- down path
  always_comb begin
    for (int j = 0; j < N; j++) begin
      s_rd_req[j] = 1'b0;
      s_wr_req[j] = 1'b0;
      s_addr[j]   = '0;
      s_wdata[j]  = '0;
      s_id[j]     = 3'(j);
      unique case (mode)
        RXB_SHARED: begin
          s_rd_req[j] = st_valid[j] && !st_we[j];
          s_wr_req[j] = st_valid[j] &&  st_we[j];
          s_addr[j]   = st_addr[j];
          s_wdata[j]  = st_wdata[j];
          s_id[j]     = st_id[j];
        end
        RXB_PRIVATE: begin
          s_rd_req[j] = w_rd_req[j] && !hold;
          s_wr_req[j] = w_wr_req[j] && !hold;
          s_addr[j]   = w_addr[j];
          s_wdata[j]  = w_wdata[j];
        end
        RXB_QUEUE: begin
          // split crosspoint: consumer j reads, producer j-1 writes
          s_rd_req[j] = w_rd_req[j] && !hold;
          s_wr_req[j] = w_wr_req[(j + N - 1) % N] && !hold;
          s_wdata[j]  = w_wdata[(j + N - 1) % N];
          s_id[j]     = 3'(j);
        end
        default: ;
      endcase
    end
  end

  // --------------------------------------------------------- up path
  always_comb begin
    for (int i = 0; i < N; i++) begin
      w_rd_gnt[i] = 1'b0;
      w_wr_gnt[i] = 1'b0;
      w_rvalid[i] = 1'b0;
      w_rdata[i]  = '0;
      ev_conflict[i] = 1'b0;
      unique case (mode)
        RXB_SHARED: begin
          w_rd_gnt[i] = sh_gnt[i] && w_rd_req[i];
          w_wr_gnt[i] = sh_gnt[i] && w_wr_req[i];
          ev_conflict[i] = !hold && (w_rd_req[i] || w_wr_req[i]) && !sh_gnt[i];
          for (int j = 0; j < N; j++) begin
            if (s_rvalid[j] && s_rid[j] == 3'(i)) begin
              w_rvalid[i] = 1'b1;
              w_rdata[i]  = s_rdata[j];
            end
          end
        end
        RXB_PRIVATE: begin
          w_rd_gnt[i] = !hold && s_rd_ready[i];
          w_wr_gnt[i] = !hold && s_wr_ready[i];
          w_rvalid[i] = s_rvalid[i];
          w_rdata[i]  = s_rdata[i];
        end
        RXB_QUEUE: begin
          w_rd_gnt[i] = !hold && s_rd_ready[i];
          w_wr_gnt[i] = !hold && s_wr_ready[(i + 1) % N];
          w_rvalid[i] = s_rvalid[i];
          w_rdata[i]  = s_rdata[i];
        end
        default: ;
      endcase
    end
  end

  // In shared mode at most one slice answers a given worker per cycle
  // (a worker keeps at most one read outstanding).
  logic [N-1:0] ans_cnt_ok;
  always_comb begin
    for (int i = 0; i < N; i++) begin
      int cnt;
      cnt = 0;
      for (int j = 0; j < N; j++) if (s_rvalid[j] && s_rid[j] == 3'(i)) cnt++;
      ans_cnt_ok[i] = !is_shared || (cnt <= 1);
    end
  end
  a_one_answer: assert property (@(posedge clk) disable iff (!rst_n) &ans_cnt_ok);

endmodule
