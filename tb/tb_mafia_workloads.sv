// tb_mafia_workloads -- the default MAFIA configuration run with the patch
// and reference-signature counts of the Embench-IoT programs it was
// evaluated on.
//
// The programs themselves need the host core and the instrumenting
// compiler, which are not part of this RTL. What the extension sees of a
// program is its instruction stream, so for each benchmark and optimisation
// level (-O2, -Os) this testbench builds a stream with the same number of
// patches in the .patches section (one MAFIA.ldp per patch, each at its own
// offset, each followed directly by the branch it patches, as the
// benchmarks' hot loops do) and the same number of verification
// instructions, around random straight-line code. A model of the program
// semantics plays the signature generator. Every verification must pass,
// no alarm may rise, every patch load must address its own word, and the
// number of loads and verifications must equal the benchmark's counts.
// The largest section, 1611 patches (cubic -O2), is 6444 bytes, far inside
// the 2^20-byte reach of the 20-bit offset.
//
// The core model and patch memory (two-cycle latency) are those of
// tb_mafia_top; the top is used at its default parameters.
module tb_mafia_workloads;
  import mafia_pkg::*;

  localparam logic [31:0] PATCH_BASE = 32'h0004_0000;
  localparam int NB = 19;

  // {signatures, patches} at -O2 and at -Os
  typedef struct { string name; int sig_o2; int pat_o2; int sig_os; int pat_os; } bench_t;
  bench_t benches [NB] = '{
    '{"aha-mont64",     124,  106,  92,   70},
    '{"crc32",          8,    21,   9,    21},
    '{"cubic",          98,   1611, 95,   1608},
    '{"edn",            53,   63,   53,   64},
    '{"huffbench",      90,   90,   61,   73},
    '{"matmult-int",    29,   70,   10,   54},
    '{"minver",         56,   489,  59,   474},
    '{"nbody",          52,   404,  42,   387},
    '{"nettle-aes",     46,   63,   44,   59},
    '{"nettle-sha256",  39,   44,   46,   46},
    '{"nsichneu",       654,  565,  648,  546},
    '{"qrduino",        554,  455,  448,  357},
    '{"slre",           242,  211,  214,  168},
    '{"st",             58,   420,  44,   409},
    '{"statemate",      203,  141,  198,  138},
    '{"ud",             39,   62,   37,   62},
    '{"picojpeg",       881,  665,  642,  485},
    '{"sglib-combined", 197,  219,  206,  214},
    '{"wikisort",       354,  647,  318,  625}};

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
  int n_ldp, n_verify, n_stall, n_alarm;
  int n_runs = 0;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---- architectural model ---------------------------------------------------
  logic [31:0] m_sig, m_patch;
  logic [31:0] patches [2048];          // room for the largest section

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
  logic [11:0] ex_fields, wb_q;
  int          mem_cnt;
  logic [31:0] ldp_addr_q;

  assign stage_en   = 1'b1;
  assign stage_clr  = !ex_valid;
  assign stage_ctrl = wb_q;

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
          ldp_rdata  <= patches[11'((ldp_addr_q - PATCH_BASE) >> 2)];
        end
      end
    end
  end

  task automatic idle();
    id_ex_en = 0; id_is_cf = 0; id_ctrl = '0; id_instr = '0; mispredict = 0;
    ref_valid = 0; ref_sig = 0; csr_we = 0; iv_we = 0; irq_take = 0; mret = 0;
    ex_valid = 0;
  endtask

  task automatic tick();
    #1;
    if (alarm) n_alarm++;
    @(posedge clk); #1;
    idle();
    #1;
  endtask

  function automatic dec_ctrl_t rand_ctrl();
    dec_ctrl_t c;
    c = {$urandom, $urandom};
    return c;
  endfunction

  // One instruction through decode and execute; branches resolve as
  // predicted here, roll-back is exercised elsewhere.
  task automatic run(instr_info_t ii, logic taken);
    dec_ctrl_t c;
    logic [31:0] exp_ref;
    c = rand_ctrl();
    id_is_cf = ii.is_cf;
    #1;
    while (stall) begin
      n_stall++;
      tick();
      id_is_cf = ii.is_cf;
      #1;
    end
    id_ex_en = 1; id_ctrl = c; id_instr = ii;
    tick();
    ex_valid = 1; ex_fields = {c.lsu, c.wb};
    m_sig = crc(m_sig, pstate(c));
    exp_ref = m_sig;
    if (ii.is_ldp) begin
      chk(ldp_req && ldp_addr == PATCH_BASE + {12'd0, ii.ldp_offset}, "patch load addresses its own word");
      m_patch = patches[11'(ii.ldp_offset >> 2)];
      n_ldp++;
    end
    if (ii.is_cf && taken) m_sig = m_sig ^ m_patch;
    if (ii.is_cf) m_patch = 0;
    if (ii.is_verify) begin
      ref_valid = 1; ref_sig = exp_ref;
      #1;
      chk(!sig_fault, "verification passes");
      n_verify++;
    end
    tick();
  endtask

  function automatic instr_info_t branch(logic taken, logic ver);
    instr_info_t ii;
    ii = '0; ii.is_cf = 1; ii.pred_taken = taken; ii.is_verify = ver;
    return ii;
  endfunction

  task automatic run_bench(string name, int nsig, int npat);
    int s, p;
    idle();
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    #1;
    csr_we = 1; csr_addr = 12'h7C0; csr_wdata = PATCH_BASE;
    tick();
    for (int i = 0; i < 2048; i++) patches[i] = (i < npat) ? $urandom : 32'd0;
    m_sig = 0; m_patch = 0;
    n_ldp = 0; n_verify = 0; n_stall = 0; n_alarm = 0;
    s = 0; p = 0;
    while (s < nsig || p < npat) begin
      instr_info_t ii;
      repeat (1 + $urandom % 4) run('0, 0);
      if (p < npat && ($urandom % 2 == 0 || s >= nsig)) begin
        ii = '0; ii.is_ldp = 1; ii.ldp_offset = 20'(4 * p);
        run(ii, 0);
        p++;
        // the patched branch, sometimes verifying as well
        if (s < nsig && $urandom % 2 == 0) begin run(branch(1, 1), 1); s++; end
        else run(branch(1, 0), 1);
      end else begin
        logic t;
        t = 1'($urandom % 2);
        run(branch(t, 1), t);
        s++;
      end
    end
    chk(n_ldp == npat, "one patch load per patch");
    chk(n_verify == nsig, "one verification per reference signature");
    chk(n_alarm == 0, "no alarm");
    chk(n_stall > 0, "branches behind their ldp stall");
    $display("%-16s signatures=%0d patches=%0d section=%0d bytes loads=%0d verifications=%0d stalls=%0d",
             name, nsig, npat, 4 * npat, n_ldp, n_verify, n_stall);
    n_runs++;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle();
    iv_idx = 0; iv_wdata = 0; irq_id = 0;
    for (int b = 0; b < NB; b++) begin
      run_bench({benches[b].name, " -O2"}, benches[b].sig_o2, benches[b].pat_o2);
      run_bench({benches[b].name, " -Os"}, benches[b].sig_os, benches[b].pat_os);
    end
    chk(n_runs == 2 * NB, "every benchmark configuration ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
