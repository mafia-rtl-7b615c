// mafia_pkg -- types and constants shared by the MAFIA modules.
//
// The pipeline state is the 64-bit vector of decode-stage control signals
// that the CACFI monitor folds into its running signature. Its composition
// (group widths) follows the CV32E40P integration: 23 operand-select bits,
// 4 forwarding bits, 7 ALU bits, 2 load/store bits, 10 write-back bits,
// 10 immediate bits and 8 padding bits. The order of the groups inside the
// vector and the zero padding are choices of this design.
//
// instr_info_t carries what the host core's decoder knows about the MAFIA
// role of an instruction: control flow, verification variant, static
// prediction, and MAFIA.ldp with its 20-bit patch offset. The encodings of
// the MAFIA instructions themselves belong to the host core's decoder.
package mafia_pkg;

  localparam int unsigned PSTATE_W = 64;
  localparam int unsigned OPSEL_W  = 23;
  localparam int unsigned FWD_W    = 4;
  localparam int unsigned ALU_W    = 7;
  localparam int unsigned LSU_W    = 2;
  localparam int unsigned WB_W     = 10;
  localparam int unsigned IMM_W    = 10;
  localparam int unsigned PAD_W    = 8;
  localparam int unsigned CSI_W    = LSU_W + WB_W;   // signals that travel past execute
  localparam int unsigned REF_W    = 32;             // verified signature bits
  localparam int unsigned OFFSET_W = 20;             // MAFIA.ldp immediate

  // Decode-stage control groups (all statically determined by the instruction).
  typedef struct packed {
    logic [OPSEL_W-1:0] opsel;  // operand selection multiplexers
    logic [FWD_W-1:0]   fwd;    // operand forwarding multiplexers
    logic [ALU_W-1:0]   alu;    // ALU operation
    logic [LSU_W-1:0]   lsu;    // load/store read and write enables
    logic [WB_W-1:0]    wb;     // register write-back controls
    logic [IMM_W-1:0]   imm;    // immediate bits not already in opsel
  } dec_ctrl_t;

  // MAFIA role of the instruction leaving decode.
  typedef struct packed {
    logic                is_cf;       // control-flow instruction (branch, jal, jalr, return)
    logic                is_verify;   // MAFIA.* verification variant: reference word follows
    logic                pred_taken;  // fetch continued at the target (jumps; predicted branches)
    logic                is_ldp;      // MAFIA.ldp
    logic                ldp_hi;      // ldp loads the upper 32 bits of a 64-bit patch
    logic [OFFSET_W-1:0] ldp_offset;  // patch offset inside the .patches section
  } instr_info_t;

  typedef enum logic { SIG_CRC32 = 1'b0, SIG_CBCMAC = 1'b1 } sig_func_e;

  typedef enum logic [1:0] {
    DUP_COPY       = 2'd0,   // plain copy
    DUP_COMPLEMENT = 2'd1,   // inverted copy
    DUP_XOR        = 2'd2    // copy xored with a constant mask
  } dup_mode_e;

  // Packs the decode control groups into the 64-bit pipeline state.
  function automatic logic [PSTATE_W-1:0] pack_pstate(dec_ctrl_t c);
    return {c, {PAD_W{1'b0}}};
  endfunction

  // The part of the decode controls that CSI duplicates.
  function automatic logic [CSI_W-1:0] csi_fields(dec_ctrl_t c);
    return {c.lsu, c.wb};
  endfunction

  // Signature width of each signature function.
  function automatic int unsigned sig_width(sig_func_e f);
    return (f == SIG_CBCMAC) ? 64 : 32;
  endfunction

endpackage
