// tb_mafia_cacfi -- checks the CACFI monitor against an architectural model.
//
// CRC32 instance (default): a random instruction stream drives the monitor.
// The model follows the program semantics only (S <- f(S, state) per
// executed instruction; on a taken control-flow instruction S <- S ^ P;
// P <- 0 after every control-flow instruction; the handler IV on interrupt
// entry, the saved value on return) and knows nothing of prediction: the
// monitor must reach the same signature while it follows predicted paths,
// folds in wrong-path instructions and rolls back on mispredictions reported
// in the same or the next cycle. Reference words arrive in the same cycle as
// the verification instruction or up to two cycles later; some are
// corrupted and must raise sig_fault_o, the others must not.
//
// CBC-MAC/PRINCE instance: a short fixed sequence with a 64-bit patch loaded
// in two halves, checked against values from an independent software model.
module tb_mafia_cacfi;
  import mafia_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [127:0] key = 128'h0f1e2d3c4b5a69788796a5b4c3d2e1f0;
  logic ps_valid, mispredict, ref_valid, patch_we, patch_hi, iv_we, irq_take, mret;
  logic [63:0] ps, iv_wdata;
  instr_info_t info;
  logic [31:0] ref_sig, patch_wdata;
  logic [4:0] iv_idx, irq_id;
  logic sig_fault, ctx_fault, vpend, bb_end;
  logic [31:0] sig;
  logic sig_fault_m, ctx_fault_m, vpend_m, bb_end_m;
  logic [63:0] sig_m;
  int checks = 0, failures = 0;
  int n_verify_ok = 0, n_verify_bad = 0, n_late_mp = 0, n_same_mp = 0, n_irq = 0, n_taken = 0;

  always #5 clk = ~clk;

  mafia_cacfi dut (
    .clk_i(clk), .rst_ni(rst_n), .key_i(key), .ps_valid_i(ps_valid), .ps_i(ps), .ps_instr_i(info),
    .mispredict_i(mispredict), .ref_valid_i(ref_valid), .ref_sig_i(ref_sig),
    .patch_we_i(patch_we), .patch_hi_i(patch_hi), .patch_wdata_i(patch_wdata),
    .iv_we_i(iv_we), .iv_idx_i(iv_idx), .iv_wdata_i(iv_wdata), .irq_take_i(irq_take),
    .irq_id_i(irq_id), .mret_i(mret), .sig_fault_o(sig_fault), .ctx_fault_o(ctx_fault),
    .verify_pending_o(vpend), .bb_end_o(bb_end), .sig_o(sig));

  mafia_cacfi #(.SIG_FUNC(SIG_CBCMAC)) dut_mac (
    .clk_i(clk), .rst_ni(rst_n), .key_i(key), .ps_valid_i(ps_valid), .ps_i(ps), .ps_instr_i(info),
    .mispredict_i(mispredict), .ref_valid_i(ref_valid), .ref_sig_i(ref_sig),
    .patch_we_i(patch_we), .patch_hi_i(patch_hi), .patch_wdata_i(patch_wdata),
    .iv_we_i(iv_we), .iv_idx_i(iv_idx), .iv_wdata_i(iv_wdata), .irq_take_i(irq_take),
    .irq_id_i(irq_id), .mret_i(mret), .sig_fault_o(sig_fault_m), .ctx_fault_o(ctx_fault_m),
    .verify_pending_o(vpend_m), .bb_end_o(bb_end_m), .sig_o(sig_m));

  // ---- architectural model (CRC32) ------------------------------------------
  logic [31:0] m_sig, m_patch, m_ctx;
  logic [31:0] m_iv [32];

  function automatic logic [31:0] crc(logic [31:0] s, logic [63:0] d);
    logic [95:0] m;
    m = {s, 64'd0} ^ {d, 32'd0};
    for (int i = 95; i >= 32; i--)
      if (m[i]) m[i -: 33] = m[i -: 33] ^ {1'b1, 32'hF4ACFB13};
    return m[31:0];
  endfunction

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic idle_inputs();
    ps_valid = 0; mispredict = 0; ref_valid = 0; patch_we = 0; patch_hi = 0;
    iv_we = 0; irq_take = 0; mret = 0; info = '0;
  endtask

  // end of a cycle: settle, let the caller check, then the clock edge
  task automatic tick();
    @(posedge clk); #1;
    idle_inputs();
    #1;
  endtask

  // One instruction reaching execute. kind: 0 plain, 1 control flow.
  // For control flow: pred/taken, verify, ref delay (0..2 cycles), bad ref,
  // late mispredict (one wrong-path instruction folded in first), mret.
  task automatic instr(logic [63:0] st, logic cf, logic pred, logic taken, logic ver,
                       int ref_delay, logic bad, logic late_mp, logic is_mret);
    logic [31:0] exp_ref;
    logic mp;
    mp = cf && (pred != taken);
    if (late_mp && !mp) late_mp = 0;
    ps_valid = 1; ps = st; info = '0;
    info.is_cf = cf; info.pred_taken = pred; info.is_verify = cf && ver;
    m_sig = crc(m_sig, st);
    exp_ref = m_sig;
    if (cf && taken) begin m_sig = m_sig ^ m_patch; n_taken++; end
    if (cf) m_patch = 0;
    if (is_mret) begin m_sig = m_ctx; mret = 1; end
    if (mp && !late_mp) begin mispredict = 1; n_same_mp++; end
    if (cf && ver && ref_delay == 0) begin
      ref_valid = 1; ref_sig = bad ? ~exp_ref : exp_ref;
      #1 chk(sig_fault == bad, "verification result (same cycle)");
      if (bad) n_verify_bad++; else n_verify_ok++;
    end
    tick();
    if (late_mp) begin
      // wrong-path instruction enters execute, then the misprediction
      ps_valid = 1; ps = {$urandom, $urandom}; info = '0;
      tick();
      mispredict = 1; n_late_mp++;
      tick();
    end
    if (cf && ver && ref_delay > 0) begin
      for (int d = 1; d < ref_delay; d++) begin
        chk(vpend, "verification pending");
        tick();
      end
      ref_valid = 1; ref_sig = bad ? exp_ref ^ 32'h0000_0100 : exp_ref;
      #1 chk(sig_fault == bad, "verification result (late reference)");
      if (bad) n_verify_bad++; else n_verify_ok++;
      tick();
    end
    chk(sig == m_sig, $sformatf("signature %h vs model %h", sig, m_sig));
    if (cf) chk(bb_end, "basic-block end after control flow");
    else    chk(!bb_end, "no basic-block end after plain instruction");
  endtask

  task automatic load_patch(logic [31:0] v);
    patch_we = 1; patch_wdata = v; m_patch = v;
    tick();
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle_inputs();
    ps = 0; ref_sig = 0; patch_wdata = 0; iv_idx = 0; irq_id = 0; iv_wdata = 0;
    m_sig = 0; m_patch = 0; m_ctx = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(sig == 0 && bb_end, "reset state");
    // IV table
    for (int i = 0; i < 32; i++) begin
      m_iv[i] = $urandom;
      iv_we = 1; iv_idx = 5'(i); iv_wdata = {32'd0, m_iv[i]};
      tick();
    end
    for (int n = 0; n < 600; n++) begin
      int r;
      r = $urandom % 16;
      if (r < 2) load_patch($urandom);
      else if (r < 9) instr({$urandom, $urandom}, 0, 0, 0, 0, 0, 0, 0, 0);
      else if (r == 9 && bb_end) begin
        // interrupt at a basic-block boundary, short handler, return
        int id;
        id = $urandom % 32;
        irq_take = 1; irq_id = 5'(id);
        m_ctx = m_sig; m_sig = m_iv[id]; n_irq++;
        tick();
        chk(sig == m_iv[id], "handler starts from its IV");
        instr({$urandom, $urandom}, 0, 0, 0, 0, 0, 0, 0, 0);
        instr({$urandom, $urandom}, 1, 1, 1, 1, 0, 0, 0, 1);   // verified return
        chk(!ctx_fault, "no context error");
      end else begin
        logic pred, taken, ver, bad, late;
        pred = $urandom % 2; taken = $urandom % 2; ver = $urandom % 2;
        bad = ($urandom % 5) == 0; late = $urandom % 2;
        instr({$urandom, $urandom}, 1, pred, taken, ver, $urandom % 3, bad, late, 0);
      end
    end
    chk(n_verify_ok > 20 && n_verify_bad > 5, "verifications passed and failed");
    chk(n_late_mp > 5 && n_same_mp > 5, "mispredictions in both timings");
    chk(n_irq > 3 && n_taken > 20, "interrupts and taken updates");
    $display("verify ok=%0d bad=%0d mispredict same=%0d late=%0d irq=%0d taken=%0d",
             n_verify_ok, n_verify_bad, n_same_mp, n_late_mp, n_irq, n_taken);

    // ---- CBC-MAC/PRINCE instance, fixed sequence -----------------------------
    rst_n = 0; @(posedge clk); #1 rst_n = 1; idle_inputs();
    ps_valid = 1; ps = 64'h1111222233334444; tick();
    chk(sig_m == 64'hc3d3aad32f6ccbae, "mac step 1");
    patch_we = 1; patch_hi = 1; patch_wdata = 32'h01234567; tick();
    patch_we = 1; patch_hi = 0; patch_wdata = 32'h89abcdef; tick();
    ps_valid = 1; ps = 64'h5555666677778888; tick();
    chk(sig_m == 64'h83cf9d6627a516a9, "mac step 2");
    ps_valid = 1; ps = 64'h9999aaaabbbbcccc; info.is_cf = 1; info.pred_taken = 1; tick();
    chk(sig_m == 64'hb1f6e1c3a042d4ee, "mac step 3 with 64-bit patch update");
    ps_valid = 1; ps = 64'hdddd0000eeee0000; info.is_cf = 1; info.is_verify = 1;
    ref_valid = 1; ref_sig = 32'h0b482288;
    #1 chk(!sig_fault_m, "mac verification passes on low 32 bits");
    tick();
    chk(sig_m == 64'h9749085a0b482288, "mac step 4, patch back to default");
    ps_valid = 1; ps = 64'h0; info.is_cf = 1; info.is_verify = 1;
    ref_valid = 1; ref_sig = 32'h0b482288;
    #1 chk(sig_fault_m, "mac verification fails on a wrong reference");
    tick();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
