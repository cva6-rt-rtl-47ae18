// clic_ctrl: core-side interrupt controller that injects CLIC interrupts at
// the commit stage, directly into the target privilege mode.
//
// The interrupt selected by the CLIC passes two register stages:
//   1. sample: the CLIC request is registered next to the commit stage;
//   2. decide: the request is checked against the hart state and, if it may
//      be taken, registered as a trap request (trap_o) with its vector
//      address.
// A target mode is M, HS (S with virt=0) or VS (S with the CLIC virtual bit).
// The request may be taken when the target ranks above the current mode
// (M > HS > VS > U), or equals it with that mode's global interrupt enable
// set, and its level exceeds both that mode's interrupt threshold and its
// current interrupt level (this is what allows preemption/nesting).
// The commit stage takes the trap (take_o) in a cycle where commit_ready_i is
// high and the hardware context save is idle; take_o also acknowledges the
// interrupt to the CLIC and starts the context save.
//
// Tail-chaining: in the cycle commit retires a handler's xRET (xret_i), a
// sampled request is also judged combinationally against the returned-to
// hart state. If it (or an already decided request) is taken then, commit
// goes straight to the new handler instead of the interrupted code, and
// tail_chain_o tells the context-save unit not to save again: the interrupted context is still in the save area. The hart
// state inputs must then already show the levels being returned to.
//
// Timing: from irq_i becoming valid, take_o can rise two clock edges later
// (commit ready), or one later than that per cycle commit is not ready: this
// gives the 2..3 cycle injection time of the design this follows, with one
// cycle of commit wait. The vector address is xtvt + 8*id for selectively
// hardware-vectored interrupts, else xtvec. The sampling at commit and the
// direct injection to lower modes, including VS, follow the paper; the exact
// rank rule and the wait for the context-save unit are this design's choices.
module clic_ctrl
  import cva6rt_pkg::*;
(
  input  logic            clk_i,
  input  logic            rst_ni,
  input  clic_irq_t       irq_i,
  // hart state (from the CSR file)
  input  priv_lvl_t       priv_lvl_i,
  input  logic            virt_i,
  input  logic            mie_i,
  input  logic            sie_i,
  input  logic            vsie_i,
  input  logic [7:0]      mintthresh_i,
  input  logic [7:0]      sintthresh_i,
  input  logic [7:0]      vsintthresh_i,
  input  logic [7:0]      mil_i,
  input  logic [7:0]      sil_i,
  input  logic [7:0]      vsil_i,
  input  logic [PLEN-1:0] mtvt_i,
  input  logic [PLEN-1:0] stvt_i,
  input  logic [PLEN-1:0] vstvt_i,
  input  logic [PLEN-1:0] mtvec_i,
  input  logic [PLEN-1:0] stvec_i,
  input  logic [PLEN-1:0] vstvec_i,
  // commit stage
  input  logic            commit_ready_i,
  input  logic            xret_i,
  input  logic            ctx_busy_i,
  output irq_trap_t       trap_o,
  output logic            take_o,
  output logic            tail_chain_o,
  // acknowledge to the CLIC
  output logic            ack_o,
  output logic [7:0]      ack_id_o
);

  clic_irq_t irq_q;
  irq_trap_t trap_d, trap_q;

  // rank: 3 = M, 2 = HS, 1 = VS, 0 = U/VU
  logic [1:0] cur_rank, tgt_rank;
  logic       tgt_ie;
  logic [7:0] tgt_thresh, tgt_il, tgt_floor;
  logic       eligible;

  always_comb begin
    unique case (priv_lvl_i)
      PRIV_M:  cur_rank = 2'd3;
      PRIV_S:  cur_rank = virt_i ? 2'd1 : 2'd2;
      default: cur_rank = 2'd0;
    endcase
    tgt_rank   = 2'd0;
    tgt_ie     = 1'b0;
    tgt_thresh = 8'hff;
    tgt_il     = 8'hff;
    trap_d     = '0;
    unique case (irq_q.mode)
      PRIV_M: begin
        tgt_rank = 2'd3; tgt_ie = mie_i; tgt_thresh = mintthresh_i; tgt_il = mil_i;
        trap_d.vec_addr = irq_q.shv ? mtvt_i + (PLEN'(irq_q.id) << 3) : mtvec_i;
      end
      PRIV_S: begin
        if (irq_q.virt) begin
          tgt_rank = 2'd1; tgt_ie = vsie_i; tgt_thresh = vsintthresh_i; tgt_il = vsil_i;
          trap_d.vec_addr = irq_q.shv ? vstvt_i + (PLEN'(irq_q.id) << 3) : vstvec_i;
        end else begin
          tgt_rank = 2'd2; tgt_ie = sie_i; tgt_thresh = sintthresh_i; tgt_il = sil_i;
          trap_d.vec_addr = irq_q.shv ? stvt_i + (PLEN'(irq_q.id) << 3) : stvec_i;
        end
      end
      default: ;   // U-mode interrupts are not delivered
    endcase
    tgt_floor = (tgt_thresh > tgt_il) ? tgt_thresh : tgt_il;
    eligible  = irq_q.valid && (irq_q.mode != PRIV_U)
             && ((tgt_rank > cur_rank) || (tgt_rank == cur_rank && tgt_ie))
             && (irq_q.level > tgt_floor);
    trap_d.valid = eligible;
    trap_d.id    = irq_q.id;
    trap_d.level = irq_q.level;
    trap_d.mode  = irq_q.mode;
    trap_d.virt  = irq_q.virt;
    trap_d.shv   = irq_q.shv;
  end

  // On an xRET the decision is made in the same cycle from the sampled
  // request and the returned-to hart state.
  logic chain_now;
  assign chain_now    = xret_i && !trap_q.valid && trap_d.valid;
  assign trap_o       = chain_now ? trap_d : trap_q;
  assign take_o       = (trap_q.valid || chain_now) && commit_ready_i && !ctx_busy_i;
  assign tail_chain_o = take_o && xret_i;
  assign ack_o        = take_o;
  assign ack_id_o     = trap_o.id;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      irq_q  <= '0;
      trap_q <= '0;
    end else begin
      irq_q  <= irq_i;
      trap_q <= trap_d;
      // the taken interrupt must not be seen again from the inner stages
      if (take_o) begin
        trap_q.valid <= 1'b0;
        if (irq_i.id == trap_o.id) irq_q.valid <= 1'b0;
        if (irq_q.id == trap_o.id) trap_q.valid <= 1'b0;
      end
    end
  end

  a_take_valid: assert property (@(posedge clk_i) disable iff (!rst_ni) take_o |-> trap_o.valid);

endmodule
