// mafia_top -- the MAFIA fault-injection protection as attached to a small
// in-order RISC-V core.
//
// Two monitors run beside the pipeline without changing its data flow:
//  * CACFI folds the pipeline state of every instruction (captured in the
//    register after decode by mafia_pipeline_state) into a running
//    signature, applies patch updates on taken control flow, checks the
//    signature against reference words placed after verification
//    instructions, and handles branch roll-back and interrupts.
//  * CSI keeps a redundant copy of the control signals that travel past
//    execute and compares it, stage by stage, with the core's own.
// mafia_patch_loader holds the patch-section base CSR and carries out
// MAFIA.ldp loads through the core's load-store unit.
//
// Everything the host core provides is a port: its decoder outputs, its
// pipeline enables, the later-stage control registers CSI checks, the
// load-store path for patch loads, the CSR bus and the interrupt controls.
// alarm_o (any signature, CSI or context fault) is the exception request.
// stall_o holds a control-flow instruction in decode while a patch load is
// still in flight, so that the branch uses the new patch (the stall rule of
// the published design). The core raises id_is_cf_i also for a second
// MAFIA.ldp waiting in decode, as for the upper half of a 64-bit patch right
// behind its lower half, which keeps one patch load outstanding at a time;
// that use is this design's choice.
//
// Defaults: CRC32 signature (SIG_FUNC = SIG_CRC32, 0xFA567D89), one pipeline
// register after execute (NSTAGES = 1, a 4-stage core), one context
// register, 32 interrupt IVs, one redundant CSI copy per stage (NCOPIES;
// the published design allows several). SIG_FUNC = SIG_CBCMAC selects the
// CBC-MAC/PRINCE signature with 64-bit signatures and patches.
//
// Timing: CACFI sees an instruction in the cycle after id_ex_en_i (its
// execute cycle); the reference word is expected in that cycle or later.
module mafia_top
  import mafia_pkg::*;
#(
  parameter sig_func_e   SIG_FUNC       = SIG_CRC32,
  parameter int unsigned NSTAGES        = 1,
  parameter int unsigned NUM_IRQ        = 32,
  parameter int unsigned CTX_DEPTH      = 1,
  parameter dup_mode_e   DUP_MODE       = DUP_COPY,
  parameter int unsigned NCOPIES        = 1,
  parameter logic [11:0] PATCH_CSR_ADDR = 12'h7C0,
  parameter bit          WORD_OFFSET    = 1'b0,
  parameter logic [63:0] BOOT_IV        = 64'd0
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  logic [127:0]                   key_i,
  // decode stage
  input  logic                           id_ex_en_i,
  input  dec_ctrl_t                      id_ctrl_i,
  input  instr_info_t                    id_instr_i,
  input  logic                           id_is_cf_i,     // a control-flow instruction (or MAFIA.ldp) waits in decode
  output logic                           stall_o,
  // branch resolution and reference signature
  input  logic                           mispredict_i,
  input  logic                           ref_valid_i,
  input  logic [REF_W-1:0]               ref_sig_i,
  // CSR bus
  input  logic                           csr_we_i,
  input  logic [11:0]                    csr_addr_i,
  input  logic [31:0]                    csr_wdata_i,
  output logic [31:0]                    csr_rdata_o,
  // patch loads through the load-store unit
  output logic                           ldp_req_o,
  output logic [31:0]                    ldp_addr_o,
  input  logic                           ldp_rvalid_i,
  input  logic [31:0]                    ldp_rdata_i,
  // interrupts
  input  logic                           iv_we_i,
  input  logic [$clog2(NUM_IRQ)-1:0]     iv_idx_i,
  input  logic [63:0]                    iv_wdata_i,
  input  logic                           irq_take_i,
  input  logic [$clog2(NUM_IRQ)-1:0]     irq_id_i,
  input  logic                           mret_i,
  output logic                           irq_allow_o,
  // later pipeline registers, for CSI
  input  logic [NSTAGES-1:0]             stage_en_i,
  input  logic [NSTAGES-1:0]             stage_clr_i,
  input  logic [NSTAGES-1:0][CSI_W-1:0]  stage_ctrl_i,
  // alarms
  output logic                           verify_pending_o, // reference word still awaited
  output logic                           sig_fault_o,
  output logic                           csi_fault_o,
  output logic [NSTAGES-1:0]             csi_stage_fault_o,
  output logic                           ctx_fault_o,
  output logic                           alarm_o
);

  logic                ps_valid;
  logic [PSTATE_W-1:0] ps;
  instr_info_t         ps_instr;
  logic [CSI_W-1:0]    ps_csi;
  logic                patch_we, patch_hi, ldp_busy;
  logic [31:0]         patch_wdata;

  mafia_pipeline_state u_pstate (
    .clk_i      (clk_i),
    .rst_ni     (rst_ni),
    .id_ex_en_i (id_ex_en_i),
    .id_ctrl_i  (id_ctrl_i),
    .id_instr_i (id_instr_i),
    .ps_valid_o (ps_valid),
    .ps_o       (ps),
    .ps_instr_o (ps_instr),
    .ps_csi_o   (ps_csi)
  );

  mafia_cacfi #(
    .SIG_FUNC  (SIG_FUNC),
    .NUM_IRQ   (NUM_IRQ),
    .CTX_DEPTH (CTX_DEPTH),
    .BOOT_IV   (BOOT_IV)
  ) u_cacfi (
    .clk_i            (clk_i),
    .rst_ni           (rst_ni),
    .key_i            (key_i),
    .ps_valid_i       (ps_valid),
    .ps_i             (ps),
    .ps_instr_i       (ps_instr),
    .mispredict_i     (mispredict_i),
    .ref_valid_i      (ref_valid_i),
    .ref_sig_i        (ref_sig_i),
    .patch_we_i       (patch_we),
    .patch_hi_i       (patch_hi),
    .patch_wdata_i    (patch_wdata),
    .iv_we_i          (iv_we_i),
    .iv_idx_i         (iv_idx_i),
    .iv_wdata_i       (iv_wdata_i),
    .irq_take_i       (irq_take_i),
    .irq_id_i         (irq_id_i),
    .mret_i           (mret_i),
    .sig_fault_o      (sig_fault_o),
    .ctx_fault_o      (ctx_fault_o),
    .verify_pending_o (verify_pending_o),
    .bb_end_o         (irq_allow_o),
    .sig_o            ()
  );

  mafia_patch_loader #(
    .PATCH_CSR_ADDR (PATCH_CSR_ADDR),
    .WORD_OFFSET    (WORD_OFFSET)
  ) u_patch (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .csr_we_i      (csr_we_i),
    .csr_addr_i    (csr_addr_i),
    .csr_wdata_i   (csr_wdata_i),
    .csr_rdata_o   (csr_rdata_o),
    .ldp_issue_i   (ps_valid & ps_instr.is_ldp),
    .ldp_offset_i  (ps_instr.ldp_offset),
    .ldp_hi_i      (ps_instr.ldp_hi),
    .mem_req_o     (ldp_req_o),
    .mem_addr_o    (ldp_addr_o),
    .mem_rvalid_i  (ldp_rvalid_i),
    .mem_rdata_i   (ldp_rdata_i),
    .patch_we_o    (patch_we),
    .patch_hi_o    (patch_hi),
    .patch_wdata_o (patch_wdata),
    .busy_o        (ldp_busy)
  );

  mafia_csi #(
    .CTRL_W   (CSI_W),
    .NSTAGES  (NSTAGES),
    .DUP_MODE (DUP_MODE),
    .NCOPIES  (NCOPIES)
  ) u_csi (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .ctrl_i        (ps_csi),
    .stage_en_i    (stage_en_i),
    .stage_clr_i   (stage_clr_i),
    .stage_ctrl_i  (stage_ctrl_i),
    .stage_fault_o (csi_stage_fault_o),
    .fault_o       (csi_fault_o)
  );

  assign stall_o = id_is_cf_i & ldp_busy;
  assign alarm_o = sig_fault_o | csi_fault_o | ctx_fault_o;

endmodule
