// rocm_slice: one 4 KB slice of the L1 reconfigurable on-chip memory (ROCM).
//
// The same four 32-bit 1R1W SRAM sub-banks (256 words each) serve three modes:
//
//  * ROCM_CACHE: 4-way set-associative cache, 16 sets, 64-byte lines. A line
//    is four rows of the four banks; word w of way v in set s sits in bank
//    w[1:0], row {s, v, w[3:2]}. A narrow worker access touches one bank; a
//    128-bit L2 fill beat writes one row across all four banks, so a line
//    takes 4 beats. Tags, valid and dirty bits are flip-flops and the hit is
//    decided in the cycle the request is accepted. Write-back, write-allocate.
//    On a miss the request is parked in the request-state register, the
//    dirty victim (if any) is written back in 4 beats, the line is refilled
//    in 4 beats, and the request is replayed as a hit. The slice takes no new
//    request while a miss is in progress (blocking cache).
//  * ROCM_SPM: 1D-contiguous scratchpad, bank 0 holds words 0-255, bank 1
//    words 256-511, and so on.
//  * ROCM_QUEUE: a 1024-word FIFO over the same banks with read and write
//    pointers. The read port and the write port are independent, so the
//    producer and the consumer can each move one word in the same cycle.
//
// Addressing. With `shared` = 0 (RXB-private) the slice sees a private 4 KB
// space: SPM word = addr[11:2]; cache offset addr[5:2], index addr[9:6], tag
// addr[31:10]. With `shared` = 1 (RXB-shared) the eight slices of a tile are
// interleaved on 64-byte lines by addr[8:6] (selected by the RXB), so this
// slice drops those bits: SPM word = {addr[14:9], addr[5:2]}; cache index
// addr[12:9], tag addr[31:13]. SLICE_ID puts addr[8:6] back in L2 addresses.
//
// Interface and timing. A request is taken when (rd_req & rd_ready) or
// (wr_req & wr_ready). A read that is taken in cycle t (and hits) returns
// rvalid/rdata/rid in cycle t+2: one cycle for the SRAM, one for the read
// data pipe register. Writes return nothing. Outside queue mode at most one
// of rd_req/wr_req may be high. mode_apply (one cycle, from mode control)
// invalidates all cache lines and empties the queue; dirty lines are not
// written back, so software must not leave dirty data when it switches.
//
// L2 port (this design's own protocol; the paper gives only 128b/cycle and
// 4 cycles per line): l2_req_valid/l2_req_ready hand over a line request
// (l2_req_we = write-back, l2_req_addr = line byte address). A write-back is
// followed by exactly 4 beats on l2_wdata with l2_wvalid; a refill is
// answered by 4 beats on l2_rdata with l2_rvalid, lowest word in bits 31:0.
//
// Follows the paper: 4 KB, four 32-bit 1R1W sub-banks, 4-way set-associative
// cache with 64 B ways and 16 sets, SPM/queue 1D-contiguous layout, RD/WR
// pointers, 128-bit L2 port with 4 beats per line. Own choices: write-back
// write-allocate policy, round-robin victim choice, one outstanding miss
// (the paper's 8-entry multi-purpose registers and miss coalescing are not
// built), and the address interleaving above.
module rocm_slice
  import versa_pkg::*;
#(
  parameter logic [2:0] SLICE_ID = 3'd0
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  rocm_mode_e        mode,
  input  logic              shared,
  input  logic              mode_apply,
  // request port from the RXB
  input  logic              rd_req,
  input  logic              wr_req,
  input  logic [AW-1:0]     addr,
  input  logic [XLEN-1:0]   wdata,
  input  logic [2:0]        id,
  output logic              rd_ready,
  output logic              wr_ready,
  output logic              rvalid,
  output logic [XLEN-1:0]   rdata,
  output logic [2:0]        rid,
  // L2 port
  output logic              l2_req_valid,
  input  logic              l2_req_ready,
  output logic              l2_req_we,
  output logic [AW-1:0]     l2_req_addr,
  output logic              l2_wvalid,
  output logic [L2W-1:0]    l2_wdata,
  input  logic              l2_rvalid,
  input  logic [L2W-1:0]    l2_rdata,
  // event counters' taps (for statistics and tests)
  output logic              ev_hit,
  output logic              ev_miss,
  output logic              ev_writeback
);

  localparam int unsigned NBANK  = 4;
  localparam int unsigned BDEPTH = 256;
  localparam int unsigned NSETS  = 16;
  localparam int unsigned NWAYS  = 4;
  localparam int unsigned TAGW   = 22;
  localparam int unsigned QDEPTH = NBANK * BDEPTH;

  // ---------------------------------------------------------------- banks
  logic [NBANK-1:0]  b_we, b_re;
  logic [7:0]        b_waddr [NBANK];
  logic [XLEN-1:0]   b_wdata [NBANK];
  logic [7:0]        b_raddr [NBANK];
  logic [XLEN-1:0]   b_rdata [NBANK];

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    sram_1r1w #(.DEPTH(BDEPTH), .WIDTH(XLEN)) u_bank (
      .clk   (clk),
      .we    (b_we[b]),
      .waddr (b_waddr[b]),
      .wdata (b_wdata[b]),
      .re    (b_re[b]),
      .raddr (b_raddr[b]),
      .rdata (b_rdata[b])
    );
  end

  // ---------------------------------------------------------------- state
  typedef enum logic [2:0] {
    S_IDLE, S_WB_REQ, S_WB_DATA, S_FILL_REQ, S_FILL_DATA, S_REPLAY
  } state_e;
  state_e state;

  logic [TAGW-1:0]   tag_q   [NSETS][NWAYS];
  logic [NWAYS-1:0]  valid_q [NSETS];
  logic [NWAYS-1:0]  dirty_q [NSETS];
  logic [1:0]        rr_q    [NSETS];

  // request-state register: the request parked during a miss
  logic              sv_we;
  logic [AW-1:0]     sv_addr;
  logic [XLEN-1:0]   sv_wdata;
  logic [2:0]        sv_id;
  logic [1:0]        sv_way;    // way being replaced
  logic [2:0]        beat_q;    // 0..4
  logic              wb_rd_q;   // a write-back row read was issued last cycle

  // queue pointers and fill level
  logic [9:0]        rd_ptr, wr_ptr;
  logic [10:0]       q_count;

  // read data pipe
  logic              p1_valid;
  logic [1:0]        p1_bank;
  logic [2:0]        p1_id;

  // -------------------------------------------------------- current request
  // In S_REPLAY the parked request is processed; in S_IDLE the incoming one.
  logic              cur_valid, cur_we;
  logic [AW-1:0]     cur_addr;
  logic [XLEN-1:0]   cur_wdata;
  logic [2:0]        cur_id;

  always_comb begin
    if (state == S_REPLAY) begin
      cur_valid = 1'b1;
      cur_we    = sv_we;
      cur_addr  = sv_addr;
      cur_wdata = sv_wdata;
      cur_id    = sv_id;
    end else begin
      cur_valid = (state == S_IDLE) && (mode != ROCM_QUEUE) && (rd_req || wr_req);
      cur_we    = wr_req;
      cur_addr  = addr;
      cur_wdata = wdata;
      cur_id    = id;
    end
  end

  // address fields
  logic [3:0]      c_off, c_idx;
  logic [TAGW-1:0] c_tag;
  logic [9:0]      c_spm;
  always_comb begin
    c_off = cur_addr[5:2];
    if (shared) begin
      c_idx = cur_addr[12:9];
      c_tag = {3'b000, cur_addr[31:13]};
      c_spm = {cur_addr[14:9], cur_addr[5:2]};
    end else begin
      c_idx = cur_addr[9:6];
      c_tag = cur_addr[31:10];
      c_spm = cur_addr[11:2];
    end
  end

  // tag compare
  logic [NWAYS-1:0] hit_vec;
  logic             c_hit;
  logic [1:0]       c_hit_way;
  always_comb begin
    c_hit_way = '0;
    for (int w = 0; w < NWAYS; w++) begin
      hit_vec[w] = valid_q[c_idx][w] && (tag_q[c_idx][w] == c_tag);
      if (hit_vec[w]) c_hit_way = 2'(w);
    end
    c_hit = |hit_vec;
  end

  // victim: first invalid way, else round robin
  logic [1:0] c_victim;
  always_comb begin
    c_victim = rr_q[c_idx];
    for (int w = NWAYS - 1; w >= 0; w--) begin
      if (!valid_q[c_idx][w]) c_victim = 2'(w);
    end
  end

  // parked request fields
  logic [3:0]      s_idx;
  logic [TAGW-1:0] s_tag;
  always_comb begin
    if (shared) begin
      s_idx = sv_addr[12:9];
      s_tag = {3'b000, sv_addr[31:13]};
    end else begin
      s_idx = sv_addr[9:6];
      s_tag = sv_addr[31:10];
    end
  end

  // line byte address in the chip address space for a (tag, index) pair
  function automatic logic [AW-1:0] line_addr(input logic [TAGW-1:0] t,
                                              input logic [3:0] ix,
                                              input logic sh);
    if (sh) return {t[18:0], ix, SLICE_ID, 6'b0};
    else    return {t, ix, 6'b0};
  endfunction

  logic victim_dirty;
  assign victim_dirty = valid_q[s_idx][sv_way] && dirty_q[s_idx][sv_way];

  // ------------------------------------------------------------ handshakes
  logic q_rd_fire, q_wr_fire;
  always_comb begin
    if (mode == ROCM_QUEUE) begin
      rd_ready = (q_count != 0);
      wr_ready = (q_count != 11'(QDEPTH));
    end else begin
      rd_ready = (state == S_IDLE);
      wr_ready = (state == S_IDLE);
    end
  end
  assign q_rd_fire = (mode == ROCM_QUEUE) && rd_req && rd_ready;
  assign q_wr_fire = (mode == ROCM_QUEUE) && wr_req && wr_ready;

  logic c_miss, c_do;   // cache miss detected / access served this cycle
  assign c_miss = cur_valid && (mode == ROCM_CACHE) && !c_hit;
  assign c_do   = cur_valid && !c_miss;

  assign ev_hit       = (state == S_IDLE) && cur_valid && (mode == ROCM_CACHE) && c_hit;
  assign ev_miss      = (state == S_IDLE) && c_miss;
  assign ev_writeback = (state == S_WB_REQ) && l2_req_ready;

  // ---------------------------------------------------------- bank control
  always_comb begin
    b_we = '0;
    b_re = '0;
    for (int b = 0; b < NBANK; b++) begin
      b_waddr[b] = '0;
      b_wdata[b] = '0;
      b_raddr[b] = '0;
    end
    if (state == S_FILL_DATA) begin
      // wide fill: one row across all four banks
      for (int b = 0; b < NBANK; b++) begin
        b_we[b]    = l2_rvalid;
        b_waddr[b] = {s_idx, sv_way, beat_q[1:0]};
        b_wdata[b] = l2_rdata[32*b +: 32];
      end
    end else if (state == S_WB_DATA) begin
      for (int b = 0; b < NBANK; b++) begin
        b_re[b]    = (beat_q < 3'd4);
        b_raddr[b] = {s_idx, sv_way, beat_q[1:0]};
      end
    end else if (mode == ROCM_QUEUE) begin
      if (q_wr_fire) begin
        b_we[wr_ptr[9:8]]    = 1'b1;
        b_waddr[wr_ptr[9:8]] = wr_ptr[7:0];
        b_wdata[wr_ptr[9:8]] = wdata;
      end
      if (q_rd_fire) begin
        b_re[rd_ptr[9:8]]    = 1'b1;
        b_raddr[rd_ptr[9:8]] = rd_ptr[7:0];
      end
    end else if (c_do) begin
      // narrow access: one bank
      if (mode == ROCM_CACHE) begin
        b_we[c_off[1:0]]    = cur_we;
        b_waddr[c_off[1:0]] = {c_idx, c_hit_way, c_off[3:2]};
        b_wdata[c_off[1:0]] = cur_wdata;
        b_re[c_off[1:0]]    = !cur_we;
        b_raddr[c_off[1:0]] = {c_idx, c_hit_way, c_off[3:2]};
      end else begin
        b_we[c_spm[9:8]]    = cur_we;
        b_waddr[c_spm[9:8]] = c_spm[7:0];
        b_wdata[c_spm[9:8]] = cur_wdata;
        b_re[c_spm[9:8]]    = !cur_we;
        b_raddr[c_spm[9:8]] = c_spm[7:0];
      end
    end
  end

  // ------------------------------------------------------------- L2 port
  always_comb begin
    l2_req_valid = 1'b0;
    l2_req_we    = 1'b0;
    l2_req_addr  = '0;
    if (state == S_WB_REQ) begin
      l2_req_valid = 1'b1;
      l2_req_we    = 1'b1;
      l2_req_addr  = line_addr(tag_q[s_idx][sv_way], s_idx, shared);
    end else if (state == S_FILL_REQ) begin
      l2_req_valid = 1'b1;
      l2_req_addr  = line_addr(s_tag, s_idx, shared);
    end
  end
  assign l2_wvalid = wb_rd_q;
  assign l2_wdata  = {b_rdata[3], b_rdata[2], b_rdata[1], b_rdata[0]};

  // ------------------------------------------------------- sequential part
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      sv_we    <= 1'b0;
      sv_addr  <= '0;
      sv_wdata <= '0;
      sv_id    <= '0;
      sv_way   <= '0;
      beat_q   <= '0;
      wb_rd_q  <= 1'b0;
      rd_ptr   <= '0;
      wr_ptr   <= '0;
      q_count  <= '0;
      p1_valid <= 1'b0;
      p1_bank  <= '0;
      p1_id    <= '0;
      rvalid   <= 1'b0;
      rdata    <= '0;
      rid      <= '0;
      for (int s = 0; s < NSETS; s++) begin
        valid_q[s] <= '0;
        dirty_q[s] <= '0;
        rr_q[s]    <= '0;
        for (int w = 0; w < NWAYS; w++) tag_q[s][w] <= '0;
      end
    end else begin
      // read data pipe: stage 1 tracks the SRAM read, stage 2 drives rdata
      p1_valid <= 1'b0;
      if (q_rd_fire) begin
        p1_valid <= 1'b1;
        p1_bank  <= rd_ptr[9:8];
        p1_id    <= id;
      end else if (c_do && !cur_we) begin
        p1_valid <= 1'b1;
        p1_bank  <= (mode == ROCM_CACHE) ? c_off[1:0] : c_spm[9:8];
        p1_id    <= cur_id;
      end
      rvalid <= p1_valid;
      if (p1_valid) begin
        rdata <= b_rdata[p1_bank];
        rid   <= p1_id;
      end

      // queue pointers
      if (q_wr_fire) wr_ptr <= wr_ptr + 10'd1;
      if (q_rd_fire) rd_ptr <= rd_ptr + 10'd1;
      q_count <= q_count + 11'(q_wr_fire) - 11'(q_rd_fire);

      // dirty bit on a write hit
      if (c_do && cur_we && mode == ROCM_CACHE) dirty_q[c_idx][c_hit_way] <= 1'b1;

      wb_rd_q <= 1'b0;
      case (state)
        S_IDLE: begin
          if (c_miss) begin
            sv_we    <= cur_we;
            sv_addr  <= cur_addr;
            sv_wdata <= cur_wdata;
            sv_id    <= cur_id;
            sv_way   <= c_victim;
            state    <= (valid_q[c_idx][c_victim] && dirty_q[c_idx][c_victim])
                        ? S_WB_REQ : S_FILL_REQ;
          end
        end
        S_WB_REQ: begin
          if (l2_req_ready) begin
            beat_q <= '0;
            state  <= S_WB_DATA;
          end
        end
        S_WB_DATA: begin
          if (beat_q < 3'd4) begin
            beat_q  <= beat_q + 3'd1;
            wb_rd_q <= 1'b1;
          end else begin
            dirty_q[s_idx][sv_way] <= 1'b0;
            state                  <= S_FILL_REQ;
          end
        end
        S_FILL_REQ: begin
          if (l2_req_ready) begin
            valid_q[s_idx][sv_way] <= 1'b0;
            beat_q                 <= '0;
            state                  <= S_FILL_DATA;
          end
        end
        S_FILL_DATA: begin
          if (l2_rvalid) begin
            beat_q <= beat_q + 3'd1;
            if (beat_q == 3'd3) begin
              tag_q[s_idx][sv_way]   <= s_tag;
              valid_q[s_idx][sv_way] <= 1'b1;
              dirty_q[s_idx][sv_way] <= 1'b0;
              rr_q[s_idx]            <= sv_way + 2'd1;
              state                  <= S_REPLAY;
            end
          end
        end
        S_REPLAY: state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase

      // reconfiguration: drop cache contents and empty the queue
      if (mode_apply) begin
        for (int s = 0; s < NSETS; s++) begin
          valid_q[s] <= '0;
          dirty_q[s] <= '0;
        end
        rd_ptr  <= '0;
        wr_ptr  <= '0;
        q_count <= '0;
        state   <= S_IDLE;
      end
    end
  end

  // Outside queue mode a port carries either a read or a write, not both.
  a_one_op: assert property (@(posedge clk) disable iff (!rst_n)
                             (mode != ROCM_QUEUE) |-> !(rd_req && wr_req));
  // The write-back leaves the victim before the refill overwrites it.
  a_victim: assert property (@(posedge clk) disable iff (!rst_n)
                             (state == S_FILL_DATA) |-> !victim_dirty);

endmodule
