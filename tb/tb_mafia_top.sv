// tb_mafia_top -- end-to-end test of the MAFIA extension at its default
// configuration (CRC32 signature, one pipeline register after execute).
//
// The testbench plays the host core and the signature generator. A small
// core model issues a random instruction stream, one instruction every two
// cycles (decode-to-execute, then execute), keeps its own execute/write-back
// register for CSI, answers patch loads from a .patches table after two
// cycles, and takes interrupts at basic-block boundaries. An architectural
// model (the program semantics only) computes the signature that the
// signature generator would have placed after each verification
// instruction.
//
// Phase 1 runs fault free: every verification must pass, the signature must
// never trip, CSI must stay quiet. Phase 2 injects faults: a bit flip in a
// decoded control signal (after the decoder, before the pipeline-state
// register) must be caught by the next verification; a bit flip in the
// core's write-back control register must be caught by CSI in that cycle.
// Each mechanism (verification pass and failure, patch load, load stall,
// taken update, misprediction roll-back in both timings, interrupt entry and
// return, CSR access, CSI detection) is counted and must occur.
module tb_mafia_top;
  import mafia_pkg::*;

  localparam logic [31:0] PATCH_BASE = 32'h0010_0000;

  logic clk = 0, rst_n = 0;
  logic [127:0] key = '0;
  logic id_ex_en, id_is_cf, stall, mispredict, ref_valid;
  dec_ctrl_t id_ctrl;
  instr_info_t id_instr;
  logic [31:0] ref_sig;
  logic csr_we; logic [11:0] csr_addr; logic [31:0] csr_wdata, csr_rdata;
  logic ldp_req, ldp_rvalid; logic [31:0] ldp_addr, ldp_rdata;
  logic iv_we, irq_take, mret, irq_allow; logic [4:0] iv_idx, irq_id; logic [63:0] iv_wdata;
  logic [0:0] stage_en, stage_clr; logic [0:0][11:0] stage_ctrl; logic [0:0] stage_fault;
  logic vpend, sig_fault, csi_fault, ctx_fault, alarm;

  always #5 clk = ~clk;

  mafia_top dut (
    .clk_i(clk), .rst_ni(rst_n), .key_i(key),
    .id_ex_en_i(id_ex_en), .id_ctrl_i(id_ctrl), .id_instr_i(id_instr), .id_is_cf_i(id_is_cf),
    .stall_o(stall), .mispredict_i(mispredict), .ref_valid_i(ref_valid), .ref_sig_i(ref_sig),
    .csr_we_i(csr_we), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata), .csr_rdata_o(csr_rdata),
    .ldp_req_o(ldp_req), .ldp_addr_o(ldp_addr), .ldp_rvalid_i(ldp_rvalid), .ldp_rdata_i(ldp_rdata),
    .iv_we_i(iv_we), .iv_idx_i(iv_idx), .iv_wdata_i(iv_wdata), .irq_take_i(irq_take),
    .irq_id_i(irq_id), .mret_i(mret), .irq_allow_o(irq_allow),
    .stage_en_i(stage_en), .stage_clr_i(stage_clr), .stage_ctrl_i(stage_ctrl),
    .verify_pending_o(vpend), .sig_fault_o(sig_fault), .csi_fault_o(csi_fault),
    .csi_stage_fault_o(stage_fault), .ctx_fault_o(ctx_fault), .alarm_o(alarm));

  int checks = 0, failures = 0;
  int n_verify_ok = 0, n_sig_detect = 0, n_csi_detect = 0, n_ldp = 0, n_stall = 0;
  int n_taken = 0, n_mp_same = 0, n_mp_late = 0, n_irq = 0, n_csr = 0;
  int n_false_alarm = 0;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---- architectural model ---------------------------------------------------
  logic [31:0] m_sig, m_patch, m_ctx;
  logic [31:0] m_iv [32];
  logic [31:0] patches [256];

  function automatic logic [31:0] crc(logic [31:0] s, logic [63:0] d);
    logic [95:0] m;
    m = {s, 64'd0} ^ {d, 32'd0};
    for (int i = 95; i >= 32; i--)
      if (m[i]) m[i -: 33] = m[i -: 33] ^ {1'b1, 32'hF4ACFB13};
    return m[31:0];
  endfunction

  function automatic logic [63:0] pstate(dec_ctrl_t c);
    return {c.opsel, c.fwd, c.alu, c.lsu, c.wb, c.imm, 8'h00};
  endfunction

  // ---- core model: write-back register for CSI, patch memory -----------------
  logic        ex_valid;                 // an instruction is in execute
  logic [11:0] ex_fields, wb_q;
  logic        wb_flip;                  // inject a fault into the core's register
  logic [3:0]  wb_flip_bit;
  int          mem_cnt;

  assign stage_en   = 1'b1;
  assign stage_clr  = !ex_valid;
  assign stage_ctrl = wb_flip ? (wb_q ^ (12'd1 << wb_flip_bit)) : wb_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wb_q <= '0;
    else        wb_q <= ex_valid ? ex_fields : 12'd0;
  end

  // patch memory: answers two cycles after the request
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_cnt <= 0; ldp_rvalid <= 0; ldp_rdata <= 0;
    end else begin
      ldp_rvalid <= 0;
      if (ldp_req) mem_cnt <= 2;
      else if (mem_cnt > 0) begin
        mem_cnt <= mem_cnt - 1;
        if (mem_cnt == 1) begin
          ldp_rvalid <= 1;
          ldp_rdata  <= patches[8'((ldp_addr_q - PATCH_BASE) >> 2)];
        end
      end
    end
  end
  logic [31:0] ldp_addr_q;
  always_ff @(posedge clk) if (ldp_req) ldp_addr_q <= ldp_addr;

  // ---- driving ----------------------------------------------------------------
  task automatic idle();
    id_ex_en = 0; id_is_cf = 0; id_ctrl = '0; id_instr = '0; mispredict = 0;
    ref_valid = 0; ref_sig = 0; csr_we = 0; iv_we = 0; irq_take = 0; mret = 0;
    ex_valid = 0; wb_flip = 0;
  endtask

  task automatic tick();
    #1;
    if (!wb_flip && csi_fault) n_false_alarm++;
    @(posedge clk); #1;
    idle();
    #1;
  endtask

  function automatic dec_ctrl_t rand_ctrl();
    dec_ctrl_t c;
    c = {$urandom, $urandom};
    return c;
  endfunction

  // One instruction: decode->execute cycle, then its execute cycle.
  // flip_bit >= 0 corrupts the decoded controls the protection sees.
  task automatic run(dec_ctrl_t c, instr_info_t ii, logic taken, logic late_mp,
                     logic is_mret, int flip_bit, logic expect_detect);
    dec_ctrl_t cd;
    logic [31:0] exp_ref;
    logic mp;
    mp = ii.is_cf && (ii.pred_taken != taken);
    if (!mp) late_mp = 0;
    // wait in decode while the patch load is in flight
    id_is_cf = ii.is_cf;
    #1;
    while (stall) begin
      n_stall++;
      tick();
      id_is_cf = ii.is_cf;
      #1;
    end
    cd = c;
    if (flip_bit >= 0) cd[flip_bit] = ~cd[flip_bit];
    id_ex_en = 1; id_ctrl = cd; id_instr = ii;
    tick();
    // execute cycle: architectural effect
    ex_valid = 1; ex_fields = {cd.lsu, cd.wb};
    m_sig = crc(m_sig, pstate(c));
    exp_ref = m_sig;
    if (ii.is_ldp) begin
      chk(ldp_req && ldp_addr == PATCH_BASE + {12'd0, ii.ldp_offset}, "patch load address");
      m_patch = patches[8'(ii.ldp_offset >> 2)];
      n_ldp++;
    end
    if (ii.is_cf && taken) begin m_sig = m_sig ^ m_patch; n_taken++; end
    if (ii.is_cf) m_patch = 0;
    if (is_mret) begin mret = 1; m_sig = m_ctx; end
    if (mp && !late_mp) begin mispredict = 1; n_mp_same++; end
    if (ii.is_verify) begin
      ref_valid = 1; ref_sig = exp_ref;
      #1;
      if (expect_detect) begin
        chk(sig_fault && alarm, "injected pipeline-state fault caught by verification");
        if (sig_fault) n_sig_detect++;
      end else begin
        chk(!sig_fault, "verification passes");
        if (!sig_fault) n_verify_ok++;
      end
    end
    tick();
    if (late_mp) begin
      // one wrong-path instruction reaches execute before the roll-back
      dec_ctrl_t wp;
      wp = rand_ctrl();
      id_ex_en = 1; id_ctrl = wp; id_instr = '0;
      tick();
      ex_valid = 1; ex_fields = {wp.lsu, wp.wb};
      mispredict = 1; n_mp_late++;
      tick();
    end
  endtask

  function automatic instr_info_t plain();
    return '0;
  endfunction

  function automatic instr_info_t branch(logic pred, logic ver);
    instr_info_t ii;
    ii = '0; ii.is_cf = 1; ii.pred_taken = pred; ii.is_verify = ver;
    return ii;
  endfunction

  function automatic instr_info_t ldp(int idx);
    instr_info_t ii;
    ii = '0; ii.is_ldp = 1; ii.ldp_offset = 20'(idx * 4);
    return ii;
  endfunction

  task automatic reset_all();
    idle();
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    m_sig = 0; m_patch = 0; m_ctx = 0;
    #1;
    // boot: patch base CSR, interrupt IVs
    csr_we = 1; csr_addr = 12'h7C0; csr_wdata = PATCH_BASE;
    tick();
    csr_addr = 12'h7C0; #1;
    chk(csr_rdata == PATCH_BASE, "patch base CSR");
    n_csr++;
    for (int i = 0; i < 32; i++) begin
      iv_we = 1; iv_idx = 5'(i); iv_wdata = {32'd0, m_iv[i]};
      tick();
    end
  endtask

  task automatic random_program(int len, logic inject);
    int injected_at;
    injected_at = -1;
    for (int n = 0; n < len; n++) begin
      int r;
      r = $urandom % 16;
      if (r < 2) begin
        run(rand_ctrl(), ldp($urandom % 256), 0, 0, 0, -1, 0);
        // a branch right behind the ldp exercises the load stall
        run(rand_ctrl(), branch($urandom % 2, 1), $urandom % 2, $urandom % 2, 0, -1, 0);
      end else if (r < 8) begin
        int fb;
        fb = -1;
        if (inject && injected_at < 0 && ($urandom % 4 == 0)) begin
          fb = $urandom % 56; injected_at = n;
        end
        run(rand_ctrl(), plain(), 0, 0, 0, fb, 0);
        if (fb >= 0) begin
          // the next verification must catch it; then restart clean
          run(rand_ctrl(), branch(0, 1), 0, 0, 0, -1, 1);
          reset_all();
          injected_at = -1;
        end
      end else if (r == 8 && irq_allow) begin
        int id;
        id = $urandom % 32;
        irq_take = 1; irq_id = 5'(id);
        m_ctx = m_sig; m_sig = m_iv[id]; n_irq++;
        tick();
        run(rand_ctrl(), plain(), 0, 0, 0, -1, 0);
        run(rand_ctrl(), branch(1, 1), 1, 0, 1, -1, 0);   // verified return
      end else if (r == 9 && inject) begin
        // CSI: corrupt the core's write-back control register for a cycle
        wb_flip = 1; wb_flip_bit = 4'($urandom % 12);
        #1;
        chk(csi_fault && alarm, "CSI catches a write-back control fault");
        if (csi_fault) n_csi_detect++;
        tick();
      end else begin
        run(rand_ctrl(), branch($urandom % 2, $urandom % 2), $urandom % 2, $urandom % 2, 0, -1, 0);
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) patches[i] = $urandom;
    for (int i = 0; i < 32; i++) m_iv[i] = $urandom;
    ldp_addr_q = 0;
    reset_all();
    // phase 1: fault free
    random_program(1500, 0);
    chk(n_false_alarm == 0, "no CSI alarm without faults");
    // phase 2: faults
    random_program(1500, 1);
    $display("verify_ok=%0d sig_detect=%0d csi_detect=%0d ldp=%0d stall=%0d taken=%0d mp_same=%0d mp_late=%0d irq=%0d csr=%0d",
             n_verify_ok, n_sig_detect, n_csi_detect, n_ldp, n_stall, n_taken, n_mp_same, n_mp_late, n_irq, n_csr);
    chk(n_verify_ok > 0,  "mechanism: verification pass");
    chk(n_sig_detect > 0, "mechanism: signature fault detection");
    chk(n_csi_detect > 0, "mechanism: CSI fault detection");
    chk(n_ldp > 0,        "mechanism: patch load");
    chk(n_stall > 0,      "mechanism: stall behind a patch load");
    chk(n_taken > 0,      "mechanism: taken update");
    chk(n_mp_same > 0,    "mechanism: misprediction roll-back, same cycle");
    chk(n_mp_late > 0,    "mechanism: misprediction roll-back, later cycle");
    chk(n_irq > 0,        "mechanism: interrupt entry and return");
    chk(n_csr > 0,        "mechanism: CSR access");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
