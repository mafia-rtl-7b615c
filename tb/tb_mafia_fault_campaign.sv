// tb_mafia_fault_campaign -- exhaustive single-fault campaign over a short
// protected routine, on the default MAFIA configuration.
//
// The protection is meant to catch any fault on a control signal, whether
// it hits the decoded pipeline state (caught by the signature) or a control
// register after execute (caught by CSI). This testbench checks that claim
// by simulation for a fixed 24-instruction routine shaped like a PIN check:
// a call, a comparison loop body with conditional branches (taken, not
// taken, and one misprediction rolled back), patches before the merging
// branches, and a verified return at the end, about 60 cycles in all.
//
// A golden run computes the reference words (as the signature generator
// would) and must not alarm. Then, one fault per run, from reset:
//  * pipeline state: for every instruction and every mask of 1 to 8
//    adjacent bits anywhere in its 56 decoded control bits, the decoded
//    value is corrupted on its way into the decode/execute register; the
//    final verification (or an earlier one) must raise the alarm;
//  * CSI: for every cycle of the routine and every mask of 1 to 8 adjacent
//    bits of the 12-bit control register after execute, that register is
//    corrupted for one cycle; CSI must raise the alarm.
// Faults on signals wider than 8 bits at once are outside the fault model.
// Detection by the signature is counted separately for faults caught at an
// intermediate verification and at the final one.
module tb_mafia_fault_campaign;
  import mafia_pkg::*;

  localparam logic [31:0] PATCH_BASE = 32'h0008_0000;
  localparam int N = 24;

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
  int n_ps_runs = 0, n_ps_early = 0, n_ps_final = 0, n_csi_runs = 0, n_csi_det = 0;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---- the routine -----------------------------------------------------------
  dec_ctrl_t   prog_ctrl [N];
  instr_info_t prog_info [N];
  logic        prog_taken [N];
  logic [31:0] gold_ref [N];
  logic [31:0] patches [4];

  function automatic instr_info_t op(string kind, int arg);
    instr_info_t ii;
    ii = '0;
    case (kind)
      "ldp":  begin ii.is_ldp = 1; ii.ldp_offset = 20'(4 * arg); end
      "br":   begin ii.is_cf = 1; ii.pred_taken = 1'(arg); end
      "vbr":  begin ii.is_cf = 1; ii.pred_taken = 1'(arg); ii.is_verify = 1; end
      default: ;
    endcase
    return ii;
  endfunction

  task automatic build_routine();
    int k;
    k = 0;
    // caller: set-up, patch, call
    prog_info[k] = op("alu", 0); prog_taken[k++] = 0;
    prog_info[k] = op("ldp", 0); prog_taken[k++] = 0;
    prog_info[k] = op("br", 1);  prog_taken[k++] = 1;   // call
    // callee: loads and compare, loop body
    prog_info[k] = op("alu", 0); prog_taken[k++] = 0;   // load user digit
    prog_info[k] = op("alu", 0); prog_taken[k++] = 0;   // load card digit
    prog_info[k] = op("br", 0);  prog_taken[k++] = 0;   // digits equal: fall through
    prog_info[k] = op("alu", 0); prog_taken[k++] = 0;
    prog_info[k] = op("ldp", 1); prog_taken[k++] = 0;
    prog_info[k] = op("br", 1);  prog_taken[k++] = 1;   // loop back
    prog_info[k] = op("alu", 0); prog_taken[k++] = 0;
    prog_info[k] = op("alu", 0); prog_taken[k++] = 0;
    prog_info[k] = op("vbr", 0); prog_taken[k++] = 0;   // verified compare
    prog_info[k] = op("alu", 0); prog_taken[k++] = 0;
    prog_info[k] = op("ldp", 2); prog_taken[k++] = 0;
    prog_info[k] = op("br", 0);  prog_taken[k++] = 1;   // mispredicted loop exit
    prog_info[k] = op("alu", 0); prog_taken[k++] = 0;   // status = ok
    prog_info[k] = op("alu", 0); prog_taken[k++] = 0;
    prog_info[k] = op("br", 0);  prog_taken[k++] = 0;   // counter check
    prog_info[k] = op("alu", 0); prog_taken[k++] = 0;
    prog_info[k] = op("alu", 0); prog_taken[k++] = 0;   // (nop breaking forwarding)
    prog_info[k] = op("ldp", 3); prog_taken[k++] = 0;
    prog_info[k] = op("br", 1);  prog_taken[k++] = 1;   // jump to epilogue
    prog_info[k] = op("alu", 0); prog_taken[k++] = 0;
    prog_info[k] = op("vbr", 1); prog_taken[k++] = 1;   // verified return
    for (int i = 0; i < N; i++) prog_ctrl[i] = {$urandom, $urandom};
    for (int i = 0; i < 4; i++) patches[i] = $urandom;
  endtask

  // ---- model of the program semantics ---------------------------------------
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

  // ---- core model ---------------------------------------------------------------
  logic        ex_valid;
  logic [11:0] ex_fields, wb_q, csi_mask_now;
  int          mem_cnt;
  logic [31:0] ldp_addr_q;

  assign stage_en   = 1'b1;
  assign stage_clr  = !ex_valid;
  assign stage_ctrl = wb_q ^ csi_mask_now;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wb_q <= '0;
    else        wb_q <= ex_valid ? ex_fields : 12'd0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_cnt <= 0; ldp_rvalid <= 0; ldp_rdata <= 0; ldp_addr_q <= 0;
    end else begin
      ldp_rvalid <= 0;
      if (ldp_req) begin
        mem_cnt <= 2; ldp_addr_q <= ldp_addr;
      end else if (mem_cnt > 0) begin
        mem_cnt <= mem_cnt - 1;
        if (mem_cnt == 1) begin
          ldp_rvalid <= 1;
          ldp_rdata  <= patches[2'((ldp_addr_q - PATCH_BASE) >> 2)];
        end
      end
    end
  end

  // ---- one run of the routine ---------------------------------------------------
  int   cyc, csi_cycle;
  logic [11:0] csi_mask;
  logic seen_alarm;
  int   first_alarm_instr;
  int   cur_instr;

  task automatic idle();
    id_ex_en = 0; id_is_cf = 0; id_ctrl = '0; id_instr = '0; mispredict = 0;
    ref_valid = 0; ref_sig = 0; csr_we = 0; iv_we = 0; irq_take = 0; mret = 0;
    ex_valid = 0;
  endtask

  task automatic tick();
    csi_mask_now = (cyc == csi_cycle) ? csi_mask : 12'd0;
    #1;
    if (alarm && !seen_alarm) begin seen_alarm = 1; first_alarm_instr = cur_instr; end
    @(posedge clk); #1;
    idle();
    csi_mask_now = 12'd0;
    cyc++;
    #1;
  endtask

  // fault_instr < 0: no pipeline-state fault; csi_cycle < 0: no CSI fault.
  task automatic exec(int fault_instr, logic [55:0] fault_mask, logic golden, output int ncyc);
    logic [31:0] m_sig, m_patch;
    idle();
    csi_mask_now = 0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    #1;
    csr_we = 1; csr_addr = 12'h7C0; csr_wdata = PATCH_BASE;
    cyc = -1;                              // boot cycle is not part of the window
    cur_instr = -1;
    tick();
    cyc = 0;
    seen_alarm = 0; first_alarm_instr = -1;
    m_sig = 0; m_patch = 0;
    for (int k = 0; k < N; k++) begin
      dec_ctrl_t cd;
      instr_info_t ii;
      ii = prog_info[k];
      cur_instr = k;
      id_is_cf = ii.is_cf;
      #1;
      while (stall) begin
        tick();
        id_is_cf = ii.is_cf;
        #1;
      end
      cd = prog_ctrl[k];
      if (k == fault_instr) cd = cd ^ fault_mask;
      id_ex_en = 1; id_ctrl = cd; id_instr = ii;
      tick();
      ex_valid = 1; ex_fields = {cd.lsu, cd.wb};
      if (golden) begin
        m_sig = crc(m_sig, pstate(prog_ctrl[k]));
        gold_ref[k] = m_sig;
        if (ii.is_ldp) m_patch = patches[ii.ldp_offset[3:2]];
        if (ii.is_cf && prog_taken[k]) m_sig = m_sig ^ m_patch;
        if (ii.is_cf) m_patch = 0;
      end
      if (ii.is_cf && ii.pred_taken != prog_taken[k]) mispredict = 1;
      if (ii.is_verify) begin ref_valid = 1; ref_sig = gold_ref[k]; end
      tick();
    end
    cur_instr = N;
    repeat (2) tick();                     // the last instruction leaves the pipeline
    ncyc = cyc;
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int window;
    int dummy;
    build_routine();
    // golden run: computes the reference words, must stay silent
    csi_cycle = -1; csi_mask = 0;
    exec(-1, '0, 1, window);
    chk(!seen_alarm, "fault-free routine raises no alarm");
    $display("routine: %0d instructions, %0d cycles", N, window);
    chk(window >= 50 && window <= 80, "routine spans about 60 cycles");

    // pipeline-state faults: every instruction, every 1..8-bit adjacent mask
    for (int k = 0; k < N; k++)
      for (int w = 1; w <= 8; w++)
        for (int b = 0; b + w <= 56; b++) begin
          logic [55:0] m;
          m = ((56'd1 << w) - 56'd1) << b;
          exec(k, m, 0, dummy);
          n_ps_runs++;
          chk(seen_alarm && sig_fault_seen(), "pipeline-state fault detected");
          if (seen_alarm) begin
            if (first_alarm_instr < N - 1) n_ps_early++; else n_ps_final++;
          end
        end

    // CSI faults: every cycle of the window, every 1..8-bit adjacent mask
    for (int c = 0; c < window; c++)
      for (int w = 1; w <= 8; w++)
        for (int b = 0; b + w <= 12; b++) begin
          csi_cycle = c; csi_mask = 12'(((1 << w) - 1) << b);
          exec(-1, '0, 0, dummy);
          n_csi_runs++;
          chk(seen_alarm && csi_seen, "CSI fault detected");
          if (seen_alarm) n_csi_det++;
        end
    csi_cycle = -1;

    $display("pipeline-state faults: %0d runs, %0d caught at an intermediate verification, %0d at the final one",
             n_ps_runs, n_ps_early, n_ps_final);
    $display("CSI faults: %0d runs, %0d caught", n_csi_runs, n_csi_det);
    chk(n_ps_early > 0, "mechanism: detection at an intermediate verification");
    chk(n_ps_final > 0, "mechanism: detection carried to the final verification");
    chk(n_csi_det > 0,  "mechanism: CSI detection");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // which detector fired during the run
  logic sig_seen, csi_seen;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin sig_seen <= 0; csi_seen <= 0; end
    else begin
      if (sig_fault) sig_seen <= 1;
      if (csi_fault) csi_seen <= 1;
    end
  end
  function automatic logic sig_fault_seen();
    return sig_seen;
  endfunction
endmodule
