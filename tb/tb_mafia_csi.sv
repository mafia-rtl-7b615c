// tb_mafia_csi -- drives a model of a two-register pipeline tail (the
// 5-stage arrangement) and of a one-register tail (default) in lock step
// with CSI, with bubbles and random control values. Fault-free cycles must
// not raise fault_o; a bit flip injected into the core's copy at a random
// stage must raise it in that cycle. All three redundancy forms are run,
// and a three-copy instance (inverted copies) besides.
module tb_mafia_csi;
  import mafia_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [11:0] ctrl;          // pipeline-state fields (register after decode)
  logic [1:0]  en, clr;
  logic [1:0][11:0] core;     // the core's later registers (possibly faulted)
  logic [1:0][11:0] good;     // fault-free values
  logic f1, f2c, f2x, f2, f2n;
  logic [0:0] sf1; logic [1:0] sf2, sf2c, sf2x, sf2n;
  int checks = 0, failures = 0, injected = 0;

  always #5 clk = ~clk;

  mafia_csi dut1 (.clk_i(clk), .rst_ni(rst_n), .ctrl_i(ctrl), .stage_en_i(en[0]), .stage_clr_i(clr[0]),
                  .stage_ctrl_i(core[0]), .stage_fault_o(sf1), .fault_o(f1));
  mafia_csi #(.NSTAGES(2)) dut2 (.clk_i(clk), .rst_ni(rst_n), .ctrl_i(ctrl), .stage_en_i(en), .stage_clr_i(clr),
                  .stage_ctrl_i(core), .stage_fault_o(sf2), .fault_o(f2));
  mafia_csi #(.NSTAGES(2), .DUP_MODE(DUP_COMPLEMENT)) dut2c (.clk_i(clk), .rst_ni(rst_n), .ctrl_i(ctrl),
                  .stage_en_i(en), .stage_clr_i(clr), .stage_ctrl_i(core), .stage_fault_o(sf2c), .fault_o(f2c));
  mafia_csi #(.NSTAGES(2), .DUP_MODE(DUP_XOR)) dut2x (.clk_i(clk), .rst_ni(rst_n), .ctrl_i(ctrl),
                  .stage_en_i(en), .stage_clr_i(clr), .stage_ctrl_i(core), .stage_fault_o(sf2x), .fault_o(f2x));
  mafia_csi #(.NSTAGES(2), .NCOPIES(3), .DUP_MODE(DUP_COMPLEMENT)) dut2n (.clk_i(clk), .rst_ni(rst_n),
                  .ctrl_i(ctrl), .stage_en_i(en), .stage_clr_i(clr), .stage_ctrl_i(core),
                  .stage_fault_o(sf2n), .fault_o(f2n));

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ctrl = 0; en = 0; clr = 0; good = '0; core = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      // what the core's registers took at the last edge
      ctrl = 12'($urandom);
      en  = 2'($urandom | 2'b01);
      clr = 2'($urandom % 4 == 0 ? 2'b01 : 2'b00);
      core = good;
      if (n % 5 == 4) begin
        int s, b;
        s = $urandom % 2; b = $urandom % 12;
        core[s][b] = ~core[s][b];
        injected++;
        #1;
        chk(f2 && sf2[s] && f2c && f2x, $sformatf("fault in stage %0d detected", s));
        chk(f2n && sf2n[s] && sf2n[1-s] == 0, "fault detected by three-copy CSI, in its stage only");
        if (s == 0) chk(f1, "fault detected by one-stage CSI");
      end else begin
        #1;
        chk(!f1 && !f2 && !f2c && !f2x && !f2n, "no false alarm");
      end
      // model the core's registers for the next edge
      @(posedge clk);
      if (clr[1]) good[1] = 0; else if (en[1]) good[1] = good[0];
      if (clr[0]) good[0] = 0; else if (en[0]) good[0] = ctrl;
    end
    chk(injected > 50, "faults injected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
