// lrg_arbiter: least-recently-granted arbiter.
//
// The RXB arbitrates every ROCM slice among the workers in least-recently-
// granted order, as the paper states; the scratchpads reuse the same arbiter.
// It is built as a matrix arbiter: prio[i][j] = 1 means requester i currently
// ranks above requester j. A requester wins when no higher-ranked requester
// is asking. When a grant is taken (update = 1) the winner drops below every
// other requester, so the order is exactly least-recently-granted. The grant
// is combinational from req; the order changes on the clock edge after a
// taken grant. After reset requester 0 ranks highest, then 1, and so on.
module lrg_arbiter #(
  parameter int unsigned N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         update, // the grant below was used this cycle
  output logic [N-1:0] gnt
);

  // prio[i][j] for i != j; the diagonal is unused.
  logic [N-1:0] prio [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      gnt[i] = req[i];
      for (int j = 0; j < N; j++) begin
        if (j != i && req[j] && prio[j][i]) gnt[i] = 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          prio[i][j] <= (i < j);
    end else if (update && |gnt) begin
      for (int i = 0; i < N; i++) begin
        if (gnt[i]) begin
          for (int j = 0; j < N; j++) begin
            if (j != i) begin
              prio[i][j] <= 1'b0;
              prio[j][i] <= 1'b1;
            end
          end
        end
      end
    end
  end

  // At most one requester is granted in any cycle.
  a_onehot_gnt: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));

endmodule
