// tb_mafia_top_cbcmac -- end-to-end test of the MAFIA extension in its
// authenticated configuration: CBC-MAC over PRINCE (64-bit signature,
// 64-bit patches loaded as two halves), a 5-stage host pipeline (two
// control registers after execute watched by CSI, each kept as two
// inverted copies), a context stack two deep for nested interrupts, 8
// interrupt vectors, word-granular patch offsets, another CSR number and a
// non-zero reset signature.
//
// As in tb_mafia_top, the testbench plays the host core and the signature
// generator: a core model issues one instruction every two cycles, keeps
// its EX/MEM and MEM/WB control registers, answers patch loads after two
// cycles and takes interrupts (also nested ones) at basic-block
// boundaries. The architectural model uses its own PRINCE, checked first
// against the cipher's published test vectors, and a random 128-bit key.
// The core raises id_is_cf_i for a control-flow instruction and also for a
// MAFIA.ldp waiting in decode, so that the second half of a 64-bit patch
// waits for the first.
//
// Phase 1 runs fault free; phase 2 flips decoded control bits (caught by
// the next verification) and bits of either later control register (caught
// by CSI in that cycle). Each mechanism is counted and must occur.
module tb_mafia_top_cbcmac;
  import mafia_pkg::*;

  localparam logic [31:0] PATCH_BASE = 32'h2000_0400;
  localparam logic [11:0] CSR_NUM    = 12'h7C1;
  localparam logic [63:0] RESET_SIG  = 64'h5A5A_0123_4567_89AB;

  logic clk = 0, rst_n = 0;
  logic [127:0] key;
  logic id_ex_en, id_is_cf, stall, mispredict, ref_valid;
  dec_ctrl_t id_ctrl;
  instr_info_t id_instr;
  logic [31:0] ref_sig;
  logic csr_we; logic [11:0] csr_addr; logic [31:0] csr_wdata, csr_rdata;
  logic ldp_req, ldp_rvalid; logic [31:0] ldp_addr, ldp_rdata;
  logic iv_we, irq_take, mret, irq_allow; logic [2:0] iv_idx, irq_id; logic [63:0] iv_wdata;
  logic [1:0] stage_en, stage_clr; logic [1:0][11:0] stage_ctrl; logic [1:0] stage_fault;
  logic vpend, sig_fault, csi_fault, ctx_fault, alarm;

  always #5 clk = ~clk;

  mafia_top #(
    .SIG_FUNC(SIG_CBCMAC), .NSTAGES(2), .NUM_IRQ(8), .CTX_DEPTH(2),
    .DUP_MODE(DUP_COMPLEMENT), .NCOPIES(2), .PATCH_CSR_ADDR(CSR_NUM), .WORD_OFFSET(1'b1),
    .BOOT_IV(RESET_SIG)
  ) dut (
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
  int n_verify_ok = 0, n_sig_detect = 0, n_csi_detect = 0, n_ldp = 0, n_ldp_pair = 0, n_stall = 0;
  int n_taken = 0, n_mp_same = 0, n_mp_late = 0, n_irq = 0, n_nested = 0, n_csr = 0;
  int n_false_alarm = 0;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---- reference PRINCE --------------------------------------------------------
  // State as 16 nibbles, nibble 0 the most significant.
  typedef logic [3:0] nib16_t [16];

  function automatic nib16_t to_n(logic [63:0] x);
    nib16_t n;
    for (int i = 0; i < 16; i++) n[i] = x[63-4*i -: 4];
    return n;
  endfunction

  function automatic logic [63:0] from_n(nib16_t n);
    logic [63:0] x;
    for (int i = 0; i < 16; i++) x[63-4*i -: 4] = n[i];
    return x;
  endfunction

  function automatic logic [3:0] sbox(logic [3:0] v, logic inv);
    logic [63:0] fwd, bwd;
    fwd = 64'hBF32AC916780E5D4;
    bwd = 64'hB732FD89A6405EC1;
    return inv ? bwd[63-4*v -: 4] : fwd[63-4*v -: 4];
  endfunction

  function automatic logic [63:0] rc(int i);
    logic [63:0] t [12];
    t = '{64'h0, 64'h13198a2e03707344, 64'ha4093822299f31d0, 64'h082efa98ec4e6c89,
          64'h452821e638d01377, 64'hbe5466cf34e90c6c, 64'h7ef84f78fd955cb1,
          64'h85840851f1ac43aa, 64'hc882d32f25323c54, 64'h64a51195e0e3610d,
          64'hd3b5a399ca0c2399, 64'hc0ac29b7c97c50dd};
    return t[i];
  endfunction

  function automatic logic [63:0] sub(logic [63:0] x, logic inv);
    nib16_t n;
    n = to_n(x);
    for (int i = 0; i < 16; i++) n[i] = sbox(n[i], inv);
    return from_n(n);
  endfunction

  // M': on each 16-bit column, output bit b of nibble j is the xor of bit b
  // of all four input nibbles except nibble (b - j - off) mod 4, with
  // off = 1 for the two middle columns.
  function automatic logic [63:0] mp(logic [63:0] x);
    nib16_t n, o;
    n = to_n(x);
    for (int c = 0; c < 4; c++) begin
      int off;
      off = (c == 1 || c == 2) ? 1 : 0;
      for (int j = 0; j < 4; j++) begin
        o[4*c+j] = 4'h0;
        for (int b = 0; b < 4; b++) begin
          logic bit_v;
          bit_v = 1'b0;
          for (int k = 0; k < 4; k++)
            if (((j + k + off) % 4) != b) bit_v ^= n[4*c+k][3-b];
          o[4*c+j][3-b] = bit_v;
        end
      end
    end
    return from_n(o);
  endfunction

  // ShiftRows on the 4x4 nibble matrix stored column by column.
  function automatic logic [63:0] sr(logic [63:0] x, logic inv);
    nib16_t n, o;
    n = to_n(x);
    for (int col = 0; col < 4; col++)
      for (int row = 0; row < 4; row++)
        if (!inv) o[4*col+row] = n[4*((col+row)%4)+row];
        else      o[4*((col+row)%4)+row] = n[4*col+row];
    return from_n(o);
  endfunction

  function automatic logic [63:0] prince(logic [63:0] p, logic [127:0] k);
    logic [63:0] k0, k1, x;
    k0 = k[127:64]; k1 = k[63:0];
    x = p ^ k0 ^ k1 ^ rc(0);
    for (int r = 1; r <= 5; r++) x = sr(mp(sub(x, 0)), 0) ^ rc(r) ^ k1;
    x = sub(mp(sub(x, 0)), 1);
    for (int r = 6; r <= 10; r++) x = sub(mp(sr(x ^ rc(r) ^ k1, 1)), 1);
    x = x ^ rc(11) ^ k1;
    return x ^ {k0[0], k0[63:1]} ^ (k0 >> 63);
  endfunction

  // ---- architectural model ---------------------------------------------------
  logic [63:0] m_sig, m_patch;
  logic [63:0] m_ctx [$];
  logic [63:0] m_iv [8];
  logic [31:0] patch_words [256];      // 64-bit patch i: words 2i (low), 2i+1 (high)

  function automatic logic [63:0] pstate(dec_ctrl_t c);
    return {c.opsel, c.fwd, c.alu, c.lsu, c.wb, c.imm, 8'h00};
  endfunction

  // ---- core model: EX/MEM and MEM/WB control registers, patch memory ---------
  logic        ex_valid;
  logic [11:0] ex_fields, exmem_q, memwb_q;
  logic        flip;
  logic        flip_stage;
  logic [3:0]  flip_bit;
  int          mem_cnt;
  logic [31:0] ldp_addr_q;

  assign stage_en      = 2'b11;
  assign stage_clr     = {1'b0, !ex_valid};
  assign stage_ctrl[0] = (flip && !flip_stage) ? (exmem_q ^ (12'd1 << flip_bit)) : exmem_q;
  assign stage_ctrl[1] = (flip &&  flip_stage) ? (memwb_q ^ (12'd1 << flip_bit)) : memwb_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      exmem_q <= '0; memwb_q <= '0;
    end else begin
      exmem_q <= ex_valid ? ex_fields : 12'd0;
      memwb_q <= exmem_q;
    end
  end

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
          ldp_rdata  <= patch_words[8'((ldp_addr_q - PATCH_BASE) >> 2)];
        end
      end
    end
  end
  always_ff @(posedge clk) if (ldp_req) ldp_addr_q <= ldp_addr;

  // ---- driving ----------------------------------------------------------------
  task automatic idle();
    id_ex_en = 0; id_is_cf = 0; id_ctrl = '0; id_instr = '0; mispredict = 0;
    ref_valid = 0; ref_sig = 0; csr_we = 0; iv_we = 0; irq_take = 0; mret = 0;
    ex_valid = 0; flip = 0;
  endtask

  task automatic tick();
    #1;
    if (!flip && csi_fault) n_false_alarm++;
    @(posedge clk); #1;
    idle();
    #1;
  endtask

  function automatic dec_ctrl_t rand_ctrl();
    dec_ctrl_t c;
    c = {$urandom, $urandom};
    return c;
  endfunction

  task automatic run(dec_ctrl_t c, instr_info_t ii, logic taken, logic late_mp,
                     logic is_mret, int flip_bit_pos, logic expect_detect);
    dec_ctrl_t cd;
    logic [63:0] exp_ref;
    logic mpr;
    mpr = ii.is_cf && (ii.pred_taken != taken);
    if (!mpr) late_mp = 0;
    id_is_cf = ii.is_cf || ii.is_ldp;
    #1;
    while (stall) begin
      n_stall++;
      tick();
      id_is_cf = ii.is_cf || ii.is_ldp;
      #1;
    end
    cd = c;
    if (flip_bit_pos >= 0) cd[flip_bit_pos] = ~cd[flip_bit_pos];
    id_ex_en = 1; id_ctrl = cd; id_instr = ii;
    tick();
    ex_valid = 1; ex_fields = {cd.lsu, cd.wb};
    m_sig = prince(m_sig ^ pstate(c), key);
    exp_ref = m_sig;
    if (ii.is_ldp) begin
      logic [31:0] w;
      chk(ldp_req && ldp_addr == PATCH_BASE + {10'd0, ii.ldp_offset, 2'b00}, "patch load address");
      w = patch_words[8'(ii.ldp_offset)];
      if (ii.ldp_hi) m_patch[63:32] = w; else m_patch[31:0] = w;
      n_ldp++;
    end
    if (ii.is_cf && taken) begin m_sig = m_sig ^ m_patch; n_taken++; end
    if (ii.is_cf) m_patch = 0;
    if (is_mret) begin mret = 1; m_sig = m_ctx.pop_back(); end
    if (mpr && !late_mp) begin mispredict = 1; n_mp_same++; end
    if (ii.is_verify) begin
      ref_valid = 1; ref_sig = exp_ref[31:0];
      #1;
      if (expect_detect) begin
        chk(sig_fault && alarm, "injected pipeline-state fault caught by verification");
        if (sig_fault) n_sig_detect++;
      end else begin
        chk(!sig_fault && !alarm, "verification passes");
        if (!sig_fault) n_verify_ok++;
      end
    end
    tick();
    if (late_mp) begin
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

  function automatic instr_info_t ldp(int word, logic hi);
    instr_info_t ii;
    ii = '0; ii.is_ldp = 1; ii.ldp_hi = hi; ii.ldp_offset = 20'(word);
    return ii;
  endfunction

  task automatic take_irq();
    int id;
    id = $urandom % 8;
    irq_take = 1; irq_id = 3'(id);
    m_ctx.push_back(m_sig); m_sig = m_iv[id]; n_irq++;
    chk(!ctx_fault, "context store accepts the interrupt");
    tick();
  endtask

  task automatic reset_all();
    idle();
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    m_sig = RESET_SIG; m_patch = 0; m_ctx.delete();
    #1;
    csr_we = 1; csr_addr = CSR_NUM; csr_wdata = PATCH_BASE;
    tick();
    csr_addr = CSR_NUM; #1;
    chk(csr_rdata == PATCH_BASE, "patch base CSR");
    n_csr++;
    for (int i = 0; i < 8; i++) begin
      iv_we = 1; iv_idx = 3'(i); iv_wdata = m_iv[i];
      tick();
    end
  endtask

  task automatic random_program(int len, logic inject);
    for (int n = 0; n < len; n++) begin
      int r;
      r = $urandom % 16;
      if (r < 3) begin
        // one or both halves of a 64-bit patch, then the branch it is for
        int p;
        p = $urandom % 128;
        run(rand_ctrl(), ldp(2*p, 0), 0, 0, 0, -1, 0);
        if (r < 2) begin
          run(rand_ctrl(), ldp(2*p + 1, 1), 0, 0, 0, -1, 0);
          n_ldp_pair++;
        end
        run(rand_ctrl(), branch($urandom % 2, 1), $urandom % 2, $urandom % 2, 0, -1, 0);
      end else if (r < 8) begin
        int fb;
        fb = -1;
        if (inject && ($urandom % 6 == 0)) fb = $urandom % 56;
        run(rand_ctrl(), plain(), 0, 0, 0, fb, 0);
        if (fb >= 0) begin
          run(rand_ctrl(), branch(0, 1), 0, 0, 0, -1, 1);
          reset_all();
        end
      end else if (r == 8 && irq_allow) begin
        take_irq();
        run(rand_ctrl(), branch(0, 0), 0, 0, 0, -1, 0);
        if (($urandom % 2) && irq_allow) begin
          // nested interrupt inside the first handler
          take_irq();
          n_nested++;
          run(rand_ctrl(), plain(), 0, 0, 0, -1, 0);
          run(rand_ctrl(), branch(1, 1), 1, 0, 1, -1, 0);
        end
        run(rand_ctrl(), plain(), 0, 0, 0, -1, 0);
        run(rand_ctrl(), branch(1, 1), 1, 0, 1, -1, 0);
      end else if (r == 9 && inject) begin
        flip = 1; flip_stage = 1'($urandom % 2); flip_bit = 4'($urandom % 12);
        #1;
        chk(csi_fault && alarm && stage_fault[flip_stage], "CSI catches a later-stage control fault");
        if (csi_fault) n_csi_detect++;
        tick();
      end else begin
        run(rand_ctrl(), branch($urandom % 2, $urandom % 2), $urandom % 2, $urandom % 2, 0, -1, 0);
      end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // the reference cipher against the published test vectors
    chk(prince(64'h0, {64'h0, 64'h0}) == 64'h818665aa0d02dfda, "PRINCE vector 1");
    chk(prince('1, {64'h0, 64'h0}) == 64'h604ae6ca03c20ada, "PRINCE vector 2");
    chk(prince(64'h0, {64'hffffffffffffffff, 64'h0}) == 64'h9fb51935fc3df524, "PRINCE vector 3");
    chk(prince(64'h0, {64'h0, 64'hffffffffffffffff}) == 64'h78a54cbe737bb7ef, "PRINCE vector 4");
    chk(prince(64'h0123456789abcdef, {64'h0, 64'hfedcba9876543210}) == 64'hae25ad3ca8fa9ccf,
        "PRINCE vector 5");
    key = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < 256; i++) patch_words[i] = $urandom;
    for (int i = 0; i < 8; i++) m_iv[i] = {$urandom, $urandom};
    ldp_addr_q = 0;
    reset_all();
    random_program(1200, 0);
    chk(n_false_alarm == 0, "no CSI alarm without faults");
    random_program(1200, 1);
    $display("verify_ok=%0d sig_detect=%0d csi_detect=%0d ldp=%0d ldp_pair=%0d stall=%0d taken=%0d mp_same=%0d mp_late=%0d irq=%0d nested=%0d csr=%0d",
             n_verify_ok, n_sig_detect, n_csi_detect, n_ldp, n_ldp_pair, n_stall, n_taken,
             n_mp_same, n_mp_late, n_irq, n_nested, n_csr);
    chk(n_verify_ok > 0,  "mechanism: verification pass");
    chk(n_sig_detect > 0, "mechanism: signature fault detection");
    chk(n_csi_detect > 0, "mechanism: CSI fault detection");
    chk(n_ldp_pair > 0,   "mechanism: 64-bit patch load in two halves");
    chk(n_stall > 0,      "mechanism: stall behind a patch load");
    chk(n_taken > 0,      "mechanism: taken update");
    chk(n_mp_same > 0,    "mechanism: misprediction roll-back, same cycle");
    chk(n_mp_late > 0,    "mechanism: misprediction roll-back, later cycle");
    chk(n_irq > 0,        "mechanism: interrupt entry and return");
    chk(n_nested > 0,     "mechanism: nested interrupt");
    chk(n_csr > 0,        "mechanism: CSR access");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
