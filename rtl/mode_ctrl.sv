// mode_ctrl: memory-mapped mode registers of a tile.
//
// The manager core reconfigures its tile by writing these registers; the
// paper states that mode control is memory mapped to the manager and that a
// mode transition completes in 2 cycles. Register map (byte offsets, this
// design's own choice):
//   0x0 MODE    [1:0] RXB mode (0 shared, 1 private, 2 queue)
//               [3:2] ROCM mode (0 cache, 1 SPM, 2 queue)
//   0x4 R2R_EN  [7:0] R2R enable, one bit per worker (takes effect next cycle)
//   0x8 STATUS  [0] mode transition in progress (read only)
// A MODE write names one of the paper's configurations: shared or private RXB
// combined with cache or SPM ROCM (2x2), or the queue configuration. If either
// field asks for queue, both RXB and ROCM go to queue mode; otherwise bit 0 of
// each field picks private/SPM.
//
// Timing: a MODE write taken at the end of cycle t makes `busy` high in
// cycles t+1 and t+2. During t+2 `apply` pulses (the ROCM slices drop cache
// tags and reset their queue pointers) and at the end of t+2 the new modes
// become active: the transition takes 2 cycles. `busy` holds the RXB from
// granting new requests. Reads return data one cycle after mc_re.
//
// Follows the paper: memory mapping to the manager and the 2-cycle
// transition. Own choices: the register map, the queue rule and the busy
// hold. Bits [31:8] of mc_rdata are always zero (no register is wider than
// 8 bits), and only bits [7:0] of mc_wdata are stored; synthesis lists the
// constant read bits as idle and lint the unused write bits.
module mode_ctrl
  import versa_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // manager bus
  input  logic            mc_we,
  input  logic            mc_re,
  input  logic [3:0]      mc_addr,
  input  logic [XLEN-1:0] mc_wdata,
  output logic [XLEN-1:0] mc_rdata,
  // configuration outputs
  output rxb_mode_e       rxb_mode,
  output rocm_mode_e      rocm_mode,
  output logic [N_WORKERS-1:0] r2r_en,
  output logic            busy,
  output logic            apply
);

  rxb_mode_e  pend_rxb;
  rocm_mode_e pend_rocm;
  logic [1:0] phase;   // 0 idle, 1 first transition cycle, 2 second

  assign busy  = (phase != 2'd0);
  assign apply = (phase == 2'd2);

  // decode of a MODE write
  rxb_mode_e  new_rxb;
  rocm_mode_e new_rocm;
  always_comb begin
    if (mc_wdata[1:0] == 2'd2 || mc_wdata[3:2] == 2'd2) begin
      new_rxb  = RXB_QUEUE;
      new_rocm = ROCM_QUEUE;
    end else begin
      new_rxb  = mc_wdata[0] ? RXB_PRIVATE : RXB_SHARED;
      new_rocm = mc_wdata[2] ? ROCM_SPM    : ROCM_CACHE;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rxb_mode  <= RXB_SHARED;
      rocm_mode <= ROCM_CACHE;
      pend_rxb  <= RXB_SHARED;
      pend_rocm <= ROCM_CACHE;
      phase     <= 2'd0;
      r2r_en    <= '0;
      mc_rdata  <= '0;
    end else begin
      unique case (phase)
        2'd1:    phase <= 2'd2;
        2'd2: begin
          phase     <= 2'd0;
          rxb_mode  <= pend_rxb;
          rocm_mode <= pend_rocm;
        end
        default: ;
      endcase
      if (mc_we && mc_addr == MC_REG_MODE && phase == 2'd0) begin
        pend_rxb  <= new_rxb;
        pend_rocm <= new_rocm;
        phase     <= 2'd1;
      end
      if (mc_we && mc_addr == MC_REG_R2R_EN) r2r_en <= mc_wdata[N_WORKERS-1:0];
      if (mc_re) begin
        unique case (mc_addr)
          MC_REG_MODE:   mc_rdata <= {28'd0, rocm_mode, rxb_mode};
          MC_REG_R2R_EN: mc_rdata <= {{(XLEN-N_WORKERS){1'b0}}, r2r_en};
          MC_REG_STATUS: mc_rdata <= {31'd0, busy};
          default:       mc_rdata <= '0;
        endcase
      end
    end
  end

  // Software waits for STATUS to clear before the next MODE write.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
                                 (mc_we && mc_addr == MC_REG_MODE) |-> !busy);

endmodule
