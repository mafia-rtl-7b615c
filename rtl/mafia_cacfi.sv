// mafia_cacfi -- Code Authenticity and Control-Flow Integrity monitor.
//
// CACFI runs generalized path signature analysis on the pipeline state
// rather than on instruction words, so one signature covers the code, the
// control flow and the decode-stage control signals at once.
//
//  * Signature register. Each cycle in which an instruction enters execute
//    (ps_valid_i), S <- f(S, pipeline state); f is CRC32 or CBC-MAC/PRINCE
//    (SIG_FUNC). The register is not readable by software.
//  * Patch register and update. Every control-flow instruction that is taken
//    applies u(S, P) = S ^ P; after every control-flow instruction, taken or
//    not, P returns to its default (0, the identity of xor). MAFIA.ldp
//    writes P (patch_we_i), a 32-bit half at a time for the 64-bit
//    CBC-MAC patch.
//  * Prediction and roll-back. At a control-flow instruction the signature
//    follows the predicted direction (pred_taken) and the other direction's
//    value is kept in a save register: for a predicted-not-taken branch the
//    saved value already has the update applied. mispredict_i (in the same
//    cycle as the branch's state or any later cycle, before the next
//    control-flow instruction) copies the save register back, discarding
//    whatever wrong-path instructions were folded in meanwhile.
//  * Verification. For a verification instruction the low 32 bits of the
//    signature after folding in that instruction (before its update) are
//    compared with the reference word that follows it in program memory
//    (ref_valid_i/ref_sig_i, same cycle or later). A mismatch pulses
//    sig_fault_o, which goes to the core's exception mechanism.
//  * Interrupts. irq_take_i saves the signature in the context store and
//    loads the handler's IV; mret_i restores it. bb_end_o is high when the
//    last instruction folded in ended a basic block; the core must only take
//    interrupts then, so that no forwarding crosses into the handler.
//
// The paper fixes the mechanisms, f, u = xor and the 32 verified bits. The
// exact cycle at which the comparison and the roll-back may happen, the
// reset IV, and folding the return instruction in before the restore are
// this design's choices. All state changes on the rising clock edge;
// sig_fault_o is combinational from ref_valid_i.
module mafia_cacfi
  import mafia_pkg::*;
#(
  parameter sig_func_e   SIG_FUNC  = SIG_CRC32,
  parameter int unsigned NUM_IRQ   = 32,
  parameter int unsigned CTX_DEPTH = 1,
  parameter logic [63:0] BOOT_IV   = 64'd0,
  parameter logic [63:0] DEFAULT_PATCH = 64'd0,
  localparam int unsigned SIG_W    = sig_width(SIG_FUNC)
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic [127:0]               key_i,         // CBC-MAC key (unused with CRC32)
  // pipeline state of the instruction in execute
  input  logic                       ps_valid_i,
  input  logic [PSTATE_W-1:0]        ps_i,
  input  instr_info_t                ps_instr_i,
  input  logic                       mispredict_i,
  // reference signature from the word after a verification instruction
  input  logic                       ref_valid_i,
  input  logic [REF_W-1:0]           ref_sig_i,
  // patch register write (MAFIA.ldp)
  input  logic                       patch_we_i,
  input  logic                       patch_hi_i,
  input  logic [31:0]                patch_wdata_i,
  // interrupts
  input  logic                       iv_we_i,
  input  logic [$clog2(NUM_IRQ)-1:0] iv_idx_i,
  input  logic [63:0]                iv_wdata_i,
  input  logic                       irq_take_i,
  input  logic [$clog2(NUM_IRQ)-1:0] irq_id_i,
  input  logic                       mret_i,
  // status
  output logic                       sig_fault_o,
  output logic                       ctx_fault_o,
  output logic                       verify_pending_o,
  output logic                       bb_end_o,
  output logic [SIG_W-1:0]           sig_o          // for the CSI-side tap and debug
);

  logic [SIG_W-1:0] sig_q, sig_n, save_q, save_n, patch_q, patch_n;
  logic [SIG_W-1:0] f_out, s_abs, s_upd, iv, ctx_top;
  logic [REF_W-1:0] exp_q;
  logic             pend_q, bb_end_q;
  logic             ovf, unf;

  // ---- signature function ----------------------------------------------
  if (SIG_FUNC == SIG_CBCMAC) begin : g_cbcmac
    mafia_sig_cbcmac u_f (
      .sig_i  (sig_q),
      .data_i (ps_i),
      .key_i  (key_i),
      .sig_o  (f_out)
    );
  end else begin : g_crc32
    mafia_sig_crc32 u_f (
      .sig_i  (sig_q),
      .data_i (ps_i),
      .sig_o  (f_out)
    );
  end

  // ---- interrupt IVs and context -----------------------------------------
  mafia_irq_context #(
    .SIG_W     (SIG_W),
    .NUM_IRQ   (NUM_IRQ),
    .CTX_DEPTH (CTX_DEPTH)
  ) u_ctx (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .iv_we_i     (iv_we_i),
    .iv_idx_i    (iv_idx_i),
    .iv_wdata_i  (iv_wdata_i[SIG_W-1:0]),
    .irq_id_i    (irq_id_i),
    .iv_o        (iv),
    .push_i      (irq_take_i),
    .push_sig_i  (sig_n),
    .pop_i       (mret_i),
    .pop_sig_o   (ctx_top),
    .overflow_o  (ovf),
    .underflow_o (unf)
  );

  // ---- next signature ------------------------------------------------------
  logic absorb_cf;
  assign absorb_cf = ps_valid_i & ps_instr_i.is_cf;
  assign s_abs     = ps_valid_i ? f_out : sig_q;
  assign s_upd     = s_abs ^ patch_q;              // u(S, P) = S xor P

  always_comb begin
    sig_n   = s_abs;
    save_n  = save_q;
    patch_n = patch_q;
    if (absorb_cf) begin
      sig_n   = ps_instr_i.pred_taken ? s_upd : s_abs;
      save_n  = ps_instr_i.pred_taken ? s_abs : s_upd;
      patch_n = DEFAULT_PATCH[SIG_W-1:0];
    end
    if (mispredict_i) sig_n = save_n;
    if (patch_we_i) begin
      if (SIG_W == 64 && patch_hi_i) patch_n[SIG_W-1 -: 32] = patch_wdata_i;
      else                           patch_n[31:0]          = patch_wdata_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sig_q   <= BOOT_IV[SIG_W-1:0];
      save_q  <= BOOT_IV[SIG_W-1:0];
      patch_q <= DEFAULT_PATCH[SIG_W-1:0];
    end else begin
      patch_q <= patch_n;
      save_q  <= save_n;
      if (irq_take_i)  sig_q <= iv;        // context saved via push_sig_i = sig_n
      else if (mret_i) sig_q <= ctx_top;
      else             sig_q <= sig_n;
    end
  end

  // ---- verification ----------------------------------------------------------
  logic             verify_now;
  logic [REF_W-1:0] exp_now;
  assign verify_now = ps_valid_i & ps_instr_i.is_verify;
  assign exp_now    = verify_now ? s_abs[REF_W-1:0] : exp_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q <= 1'b0;
      exp_q  <= '0;
    end else begin
      if (verify_now) exp_q <= s_abs[REF_W-1:0];
      pend_q <= (pend_q | verify_now) & ~ref_valid_i;
    end
  end

  assign sig_fault_o      = ref_valid_i & (pend_q | verify_now) & (ref_sig_i != exp_now);
  assign verify_pending_o = pend_q;
  assign ctx_fault_o      = ovf | unf;

  // ---- basic-block boundary -------------------------------------------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)         bb_end_q <= 1'b1;
    else if (irq_take_i) bb_end_q <= 1'b0;
    else if (mispredict_i) bb_end_q <= 1'b1;   // wrong-path instructions do not count
    else if (ps_valid_i) bb_end_q <= ps_instr_i.is_cf;
  end
  assign bb_end_o = bb_end_q;
  assign sig_o    = sig_q;

  // Rules the core must follow.
  a_ref_expected: assert property (@(posedge clk_i) disable iff (!rst_ni)
    ref_valid_i |-> pend_q || verify_now);
  a_irq_at_boundary: assert property (@(posedge clk_i) disable iff (!rst_ni)
    irq_take_i |-> bb_end_q || absorb_cf);

endmodule
