// mafia_csi -- Control Signal Integrity: redundant copy of the control
// signals that travel past execute.
//
// CACFI's signature covers every control signal up to the register after
// decode. The signals that are carried further down the pipeline (the
// load/store enables and the write-back controls, CTRL_W bits) are
// duplicated here: when the core loads a later pipeline register
// (stage_en_i[s]) the shadow register of that stage loads the same value in
// redundant form, taken for stage 0 from the pipeline state and for stage
// s > 0 from shadow stage s-1. A bubble (stage_clr_i[s]), which the core
// clears its register for, sets every shadow to the redundant form of zero.
// Every cycle each stage's shadow is decoded and compared with the core's
// own signals (stage_ctrl_i[s]); any difference raises fault_o, a single bit
// meant for the exception mechanism.
//
// DUP_MODE picks the redundant form: plain copy (the base design), inverted
// copy, or copy xored with XOR_MASK. NCOPIES > 1 keeps several independent
// shadow copies of every stage, each compared with the core's signals, so
// that a fault must hit the core's register and every copy alike to go
// unseen (the published design allows several duplicates; one is its
// implementation and the default here). NSTAGES is the number of pipeline
// registers after the decode/execute register: 1 for a 4-stage core, 2 for
// the 5-stage pipeline of the overview drawing. Which signals are copied,
// the stage count and the clear-to-zero bubble are this design's reading of
// the paper. Timing: shadows update on the clock edge; fault_o is
// combinational from stage_ctrl_i.
module mafia_csi
  import mafia_pkg::*;
#(
  parameter int unsigned     CTRL_W   = CSI_W,
  parameter int unsigned     NSTAGES  = 1,
  parameter int unsigned     NCOPIES  = 1,
  parameter dup_mode_e       DUP_MODE = DUP_COPY,
  parameter logic [CTRL_W-1:0] XOR_MASK = CTRL_W'(12'hA5A)
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  logic [CTRL_W-1:0]              ctrl_i,        // from the pipeline state
  input  logic [NSTAGES-1:0]             stage_en_i,
  input  logic [NSTAGES-1:0]             stage_clr_i,
  input  logic [NSTAGES-1:0][CTRL_W-1:0] stage_ctrl_i,  // the core's copies
  output logic [NSTAGES-1:0]             stage_fault_o,
  output logic                           fault_o
);

  // Encoding and decoding are the same involution for all three modes.
  function automatic logic [CTRL_W-1:0] redund(logic [CTRL_W-1:0] x);
    unique case (DUP_MODE)
      DUP_COMPLEMENT: return ~x;
      DUP_XOR:        return x ^ XOR_MASK;
      default:        return x;
    endcase
  endfunction

  logic [NCOPIES-1:0][NSTAGES-1:0][CTRL_W-1:0] shadow_q;

  for (genvar s = 0; s < NSTAGES; s++) begin : g_stage
    logic [NCOPIES-1:0] mismatch;
    for (genvar c = 0; c < NCOPIES; c++) begin : g_copy
      logic [CTRL_W-1:0] src;
      if (s == 0) begin : g_first
        assign src = redund(ctrl_i);
      end else begin : g_next
        assign src = shadow_q[c][s-1];
      end

      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni)               shadow_q[c][s] <= redund('0);
        else if (stage_clr_i[s])   shadow_q[c][s] <= redund('0);
        else if (stage_en_i[s])    shadow_q[c][s] <= src;
      end

      assign mismatch[c] = (redund(shadow_q[c][s]) != stage_ctrl_i[s]);
    end
    assign stage_fault_o[s] = |mismatch;
  end

  assign fault_o = |stage_fault_o;

endmodule
