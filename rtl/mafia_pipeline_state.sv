// mafia_pipeline_state -- the pipeline-state register at the decode/execute
// boundary.
//
// When the host core moves an instruction from decode into execute
// (id_ex_en_i), this register captures the instruction's decode-stage control
// groups, packed into the 64-bit pipeline state, together with the
// instruction's MAFIA role. ps_valid_o is high for exactly one cycle per
// instruction, the cycle in which the instruction sits in execute; that is
// the cycle in which CACFI folds the state into its signature. The data
// outputs hold their value until the next instruction enters, so CSI can
// copy the fields it duplicates when the core advances execute into the next
// stage.
//
// Taking the pipeline state from the register after decode, not from the
// decoder outputs, follows the paper's overview drawing. The bit order
// inside the 64 bits and the zero padding are this design's choice (see
// mafia_pkg); the 8 padding bits of ps_o are constant zero, as the
// published state pads its 56 signal bits to 64. Timing: one register
// stage, no combinational path from inputs to outputs.
module mafia_pipeline_state
  import mafia_pkg::*;
(
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 id_ex_en_i,   // decode hands an instruction to execute
  input  dec_ctrl_t            id_ctrl_i,    // its decode control groups
  input  instr_info_t          id_instr_i,   // its MAFIA role
  output logic                 ps_valid_o,   // new state this cycle
  output logic [PSTATE_W-1:0]  ps_o,         // packed pipeline state
  output instr_info_t          ps_instr_o,
  output logic [CSI_W-1:0]     ps_csi_o      // fields duplicated by CSI
);

  logic        valid_q;
  dec_ctrl_t   ctrl_q;
  instr_info_t instr_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= 1'b0;
      ctrl_q  <= '0;
      instr_q <= '0;
    end else begin
      valid_q <= id_ex_en_i;
      if (id_ex_en_i) begin
        ctrl_q  <= id_ctrl_i;
        instr_q <= id_instr_i;
      end
    end
  end

  assign ps_valid_o = valid_q;
  assign ps_o       = pack_pstate(ctrl_q);
  assign ps_instr_o = instr_q;
  assign ps_csi_o   = csi_fields(ctrl_q);

endmodule
