// mafia_irq_context -- interrupt IV table and signature context stack.
//
// An interrupt handler cannot inherit the signature of whatever code it
// interrupted, so each handler starts from its own initialisation vector.
// The IV table holds one IV per interrupt line, loaded at boot through
// iv_we_i; iv_o is the IV of irq_id_i, read combinationally. On interrupt
// entry the monitor pushes its current signature (push_i); on return it
// pops it back (pop_i, pop_sig_o shows the top entry). With CTX_DEPTH = 1
// this is the single context register of the base design; a larger depth
// gives the context stack that nested interrupts need. The saved signature
// never leaves the monitor. Pushing onto a full stack or popping an empty
// one raises overflow_o / underflow_o for one cycle and leaves the stack
// unchanged; a return and a new entry in the same cycle leave the saved
// context where it is; that alarm, the write port and the number of lines are this
// design's choices.
//
// Timing: push and pop take effect at the clock edge; pop_sig_o and iv_o
// are combinational reads.
module mafia_irq_context #(
  parameter int unsigned SIG_W     = 32,
  parameter int unsigned NUM_IRQ   = 32,
  parameter int unsigned CTX_DEPTH = 1
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       iv_we_i,
  input  logic [$clog2(NUM_IRQ)-1:0] iv_idx_i,
  input  logic [SIG_W-1:0]           iv_wdata_i,
  input  logic [$clog2(NUM_IRQ)-1:0] irq_id_i,
  output logic [SIG_W-1:0]           iv_o,
  input  logic                       push_i,
  input  logic [SIG_W-1:0]           push_sig_i,
  input  logic                       pop_i,
  output logic [SIG_W-1:0]           pop_sig_o,
  output logic                       overflow_o,
  output logic                       underflow_o
);

  localparam int unsigned PTR_W = $clog2(CTX_DEPTH + 1);

  logic [SIG_W-1:0] iv_q  [NUM_IRQ];
  logic [SIG_W-1:0] ctx_q [CTX_DEPTH];
  logic [PTR_W-1:0] cnt_q;             // number of saved contexts

  logic full, empty;
  assign full  = (cnt_q == PTR_W'(CTX_DEPTH));
  assign empty = (cnt_q == '0);

  assign iv_o        = iv_q[irq_id_i];
  // top of stack: entry cnt_q - 1 (zero when empty)
  always_comb begin
    pop_sig_o = '0;
    for (int i = 0; i < CTX_DEPTH; i++)
      if (cnt_q == PTR_W'(i + 1)) pop_sig_o = ctx_q[i];
  end
  assign overflow_o  = push_i & ~pop_i & full;
  assign underflow_o = pop_i & ~push_i & empty;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NUM_IRQ; i++) iv_q[i] <= '0;
    end else if (iv_we_i) begin
      iv_q[iv_idx_i] <= iv_wdata_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q <= '0;
      for (int i = 0; i < CTX_DEPTH; i++) ctx_q[i] <= '0;
    end else if (push_i && pop_i) begin
      // return and immediate re-entry: the restored context is saved again
    end else if (push_i && !full) begin
      for (int i = 0; i < CTX_DEPTH; i++)
        if (cnt_q == PTR_W'(i)) ctx_q[i] <= push_sig_i;
      cnt_q        <= cnt_q + 1'b1;
    end else if (pop_i && !empty) begin
      cnt_q <= cnt_q - 1'b1;
    end
  end

endmodule
