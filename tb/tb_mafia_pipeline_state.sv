// tb_mafia_pipeline_state -- checks the pipeline-state register: one valid
// pulse per instruction entering execute, the 64-bit packing (groups MSB
// first: opsel, fwd, alu, lsu, wb, imm, then 8 zero bits), the CSI fields,
// and that the outputs hold while no instruction enters.
module tb_mafia_pipeline_state;
  import mafia_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  dec_ctrl_t ctrl;
  instr_info_t info;
  logic ps_valid;
  logic [63:0] ps;
  instr_info_t ps_instr;
  logic [11:0] ps_csi;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mafia_pipeline_state dut (
    .clk_i(clk), .rst_ni(rst_n), .id_ex_en_i(en), .id_ctrl_i(ctrl), .id_instr_i(info),
    .ps_valid_o(ps_valid), .ps_o(ps), .ps_instr_o(ps_instr), .ps_csi_o(ps_csi));

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [22:0] o; logic [3:0] f; logic [6:0] a; logic [1:0] l; logic [9:0] w, im;
    logic [63:0] exp;
    ctrl = '0; info = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(ps_valid == 0 && ps == 0, "reset state");
    for (int n = 0; n < 20; n++) begin
      o = 23'($urandom); f = 4'($urandom); a = 7'($urandom); l = 2'($urandom);
      w = 10'($urandom); im = 10'($urandom);
      ctrl.opsel = o; ctrl.fwd = f; ctrl.alu = a; ctrl.lsu = l; ctrl.wb = w; ctrl.imm = im;
      info = '0; info.is_cf = n[0]; info.ldp_offset = 20'(n * 77);
      en = 1;
      @(negedge clk);
      en = 0;
      exp = 64'd0;
      exp[63:41] = o; exp[40:37] = f; exp[36:30] = a; exp[29:28] = l;
      exp[27:18] = w; exp[17:8] = im;
      chk(ps_valid == 1, "valid pulse");
      chk(ps == exp, $sformatf("packing %h vs %h", ps, exp));
      chk(ps_csi == {l, w}, "csi fields");
      chk(ps_instr.is_cf == n[0] && ps_instr.ldp_offset == 20'(n * 77), "instr info");
      ctrl = '1;   // changes in decode must not reach the register
      @(negedge clk);
      chk(ps_valid == 0, "single pulse");
      chk(ps == exp, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
