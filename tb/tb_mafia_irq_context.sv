// tb_mafia_irq_context -- checks the IV table (write, read back for every
// line) and the context store: push/pop order with a two-entry stack, the
// single context register of the default configuration, and the overflow
// and underflow alarms.
module tb_mafia_irq_context;
  logic clk = 0, rst_n = 0;
  logic iv_we = 0, push = 0, pop = 0;
  logic [4:0] iv_idx = 0, irq_id = 0;
  logic [31:0] iv_wdata = 0, push_sig = 0;
  logic [31:0] iv1, top1, iv2, top2;
  logic ovf1, unf1, ovf2, unf2;
  logic [31:0] ref_iv [32];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // default: one context register
  mafia_irq_context dut1 (
    .clk_i(clk), .rst_ni(rst_n), .iv_we_i(iv_we), .iv_idx_i(iv_idx), .iv_wdata_i(iv_wdata),
    .irq_id_i(irq_id), .iv_o(iv1), .push_i(push), .push_sig_i(push_sig), .pop_i(pop),
    .pop_sig_o(top1), .overflow_o(ovf1), .underflow_o(unf1));
  // nesting: two-entry context stack
  mafia_irq_context #(.CTX_DEPTH(2)) dut2 (
    .clk_i(clk), .rst_ni(rst_n), .iv_we_i(iv_we), .iv_idx_i(iv_idx), .iv_wdata_i(iv_wdata),
    .irq_id_i(irq_id), .iv_o(iv2), .push_i(push), .push_sig_i(push_sig), .pop_i(pop),
    .pop_sig_o(top2), .overflow_o(ovf2), .underflow_o(unf2));

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic do_push(logic [31:0] v);
    push = 1; push_sig = v; #1;
  endtask

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 32; i++) begin
      ref_iv[i] = $urandom;
      iv_we = 1; iv_idx = 5'(i); iv_wdata = ref_iv[i];
      @(negedge clk);
    end
    iv_we = 0;
    for (int i = 31; i >= 0; i--) begin
      irq_id = 5'(i); #1;
      chk(iv1 == ref_iv[i] && iv2 == ref_iv[i], $sformatf("iv %0d", i));
    end
    // underflow on an empty store
    pop = 1; #1;
    chk(unf1 && unf2, "underflow when empty");
    @(negedge clk); pop = 0;
    // first entry
    do_push(32'h1111_0001);
    chk(!ovf1 && !ovf2, "no overflow on first push");
    @(negedge clk); push = 0; #1;
    chk(top1 == 32'h1111_0001 && top2 == 32'h1111_0001, "first context saved");
    // nested entry: overflows the single register, fits the stack
    do_push(32'h2222_0002);
    chk(ovf1 && !ovf2, "second push: register full, stack not");
    @(negedge clk); push = 0; #1;
    chk(top1 == 32'h1111_0001, "full register unchanged");
    chk(top2 == 32'h2222_0002, "stack top is the nested context");
    pop = 1; #1;
    chk(!unf1 && !unf2, "pop ok");
    @(negedge clk); pop = 0; #1;
    chk(top2 == 32'h1111_0001, "stack back to outer context");
    pop = 1; #1;
    chk(unf1 && !unf2, "register empty, stack holds one");
    @(negedge clk); pop = 0; #1;
    pop = 1; #1;
    chk(unf2, "stack now empty");
    @(negedge clk); pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
