// r2r_shim: register-to-register (R2R) link shim around a worker's FPU
// register file.
//
// The worker's 32 single-precision registers s0..s31 live here. When R2R is
// enabled (r2r_en, set by software), s0, s1, s2, s3 stop being local
// registers and become the links to the West, East, North and South
// neighbours. A write-back to one of them is intercepted and sent to that
// neighbour (a systolic write); a read of one of them returns the word the
// neighbour last sent from that side (a systolic read). s4..s31 always stay
// local.
//
// Flow control uses two valid bits per link, one at each end:
//  * Write side (out_valid): 0 allows a write, 1 back-pressures. A local
//    systolic write sets it; the neighbour's rden clears it.
//  * Read side (in_valid): 1 allows a read, 0 back-pressures. The
//    neighbour's wen sets it (and loads the inbound data register); a local
//    systolic read clears it and sends rden back.
// A write to a link whose out_valid is 1 raises wr_stall; a read of a link
// whose in_valid is 0 raises rd_stall. The core's pipeline holds the
// instruction while its stall is high. Write and read stalls are separate
// because the write-back of an older instruction must not wait on the read
// of a younger one (two neighbours would otherwise deadlock).
//
// Timing: a systolic write in cycle t is readable by the neighbour from
// cycle t+1; the neighbour's read in cycle t+1 frees the link for the next
// write in cycle t+2. Register-file reads are combinational, writes take
// effect at the clock edge. A read of the same link on both read ports in
// one cycle returns the same word and consumes it once.
//
// Follows the paper: the s0-s3 <W,E,N,S> aliasing, interception of the
// write-back, the two per-link state machines with valid bits, stall-based
// flow control, one write port and two read ports. Own choices: the inbound
// data register is the only data storage on a link (one word per link), and
// the signal-level handshake timing above.
//
// The wdata field of every out_link is the core's write-back data itself, not
// a copy: the word is latched only at the receiving end, in the neighbour's
// inbound data register. Synthesis therefore reports those 4 x 32 output bits
// as wired straight to an input; that is intended.
module r2r_shim
  import versa_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            r2r_en,
  // write-back port from the core
  input  logic            wen,
  input  logic [4:0]      wsel,
  input  logic [XLEN-1:0] wdata,
  output logic            wr_stall,
  // two read ports to the core
  input  logic            ren   [2],
  input  logic [4:0]      rsel  [2],
  output logic [XLEN-1:0] rdata [2],
  output logic            rd_stall,
  // links, indexed by r2r_dir_e: out_link goes to that neighbour,
  // in_link comes from it
  output r2r_link_t       out_link [4],
  input  r2r_link_t       in_link  [4]
);

  logic [XLEN-1:0] rf [N_FPREGS];
  logic [3:0]      out_valid;
  logic [3:0]      in_valid;
  logic [XLEN-1:0] in_data [4];

  // decode
  logic       w_link;           // this write goes to a link
  logic [1:0] r_dir [2];
  logic [1:0] r_link;           // read port p addresses a link
  assign w_link = r2r_en && (wsel < 5'd4);
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      r_dir[p]  = rsel[p][1:0];
      r_link[p] = ren[p] && r2r_en && (rsel[p] < 5'd4);
    end
  end

  // stalls
  assign wr_stall = wen && w_link && out_valid[wsel[1:0]];
  always_comb begin
    rd_stall = 1'b0;
    for (int p = 0; p < 2; p++)
      if (r_link[p] && !in_valid[r_dir[p]]) rd_stall = 1'b1;
  end

  // consumption of inbound words
  logic [3:0] consume;
  always_comb begin
    consume = '0;
    if (!rd_stall) begin
      for (int p = 0; p < 2; p++)
        if (r_link[p]) consume[r_dir[p]] = 1'b1;
    end
  end

  // outbound links
  always_comb begin
    for (int d = 0; d < 4; d++) begin
      out_link[d].wen   = wen && w_link && (wsel[1:0] == 2'(d)) && !out_valid[d];
      out_link[d].wdata = wdata;
      out_link[d].rden  = consume[d];
    end
  end

  // read ports
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      if (r2r_en && rsel[p] < 5'd4) rdata[p] = in_data[r_dir[p]];
      else                           rdata[p] = rf[rsel[p]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_FPREGS; r++) rf[r] <= '0;
      out_valid <= '0;
      in_valid  <= '0;
      for (int d = 0; d < 4; d++) in_data[d] <= '0;
    end else begin
      if (wen && !w_link) rf[wsel] <= wdata;
      for (int d = 0; d < 4; d++) begin
        // write side: [A] local wen sets, [B] neighbour rden clears
        if (out_link[d].wen)     out_valid[d] <= 1'b1;
        else if (in_link[d].rden) out_valid[d] <= 1'b0;
        // read side: [B] neighbour wen sets, [A] local rden clears
        if (in_link[d].wen) begin
          in_valid[d] <= 1'b1;
          in_data[d]  <= in_link[d].wdata;
        end else if (consume[d]) begin
          in_valid[d] <= 1'b0;
        end
      end
    end
  end

  // A neighbour never writes a link that still holds an unread word.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
      !(in_link[0].wen && in_valid[0]) && !(in_link[1].wen && in_valid[1]) &&
      !(in_link[2].wen && in_valid[2]) && !(in_link[3].wen && in_valid[3]));

endmodule
