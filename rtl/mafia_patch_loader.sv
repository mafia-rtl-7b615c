// mafia_patch_loader -- patch base CSR and MAFIA.ldp load sequencing.
//
// Patch values live in a .patches section whose base address software
// writes once at boot into a new CSR (PATCH_CSR_ADDR). A MAFIA.ldp carries a
// 20-bit offset into that section; when it reaches execute (ldp_issue_i)
// this block sends the load-store unit a request for base + offset (the
// offset in bytes by default, or in 32-bit words with WORD_OFFSET = 1, which
// widens the reach of the 20-bit offset from 2^20 to 2^22 bytes, the option
// the published design describes for 4-byte aligned patches). The word that comes back
// (mem_rvalid_i) is written into the CACFI patch register through patch_we_o,
// with patch_hi_o telling which half of a 64-bit patch it is (CBC-MAC).
//
// busy_o is high from the issue cycle until the word is written. The top
// level combines it with "control-flow instruction in decode" into a stall,
// so that a branch right behind an ldp waits for its patch. One load may be
// outstanding; the core must not issue a second ldp while busy_o is high
// (asserted below). The CSR number and the one-outstanding rule are this
// design's choices.
//
// Timing: mem_req_o/mem_addr_o are combinational from ldp_issue_i; the reply
// may come one or more cycles later; patch_we_o is combinational from
// mem_rvalid_i, and the loaded word goes straight through to patch_wdata_o
// (the patch register itself lives in CACFI).
module mafia_patch_loader
  import mafia_pkg::*;
#(
  parameter logic [11:0] PATCH_CSR_ADDR = 12'h7C0,
  parameter bit          WORD_OFFSET    = 1'b0
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                csr_we_i,
  input  logic [11:0]         csr_addr_i,
  input  logic [31:0]         csr_wdata_i,
  output logic [31:0]         csr_rdata_o,
  input  logic                ldp_issue_i,
  input  logic [OFFSET_W-1:0] ldp_offset_i,
  input  logic                ldp_hi_i,
  output logic                mem_req_o,
  output logic [31:0]         mem_addr_o,
  input  logic                mem_rvalid_i,
  input  logic [31:0]         mem_rdata_i,
  output logic                patch_we_o,
  output logic                patch_hi_o,
  output logic [31:0]         patch_wdata_o,
  output logic                busy_o
);

  logic [31:0] base_q;
  logic        pend_q, hi_q;
  logic        csr_sel;

  assign csr_sel     = (csr_addr_i == PATCH_CSR_ADDR);
  assign csr_rdata_o = csr_sel ? base_q : 32'd0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) base_q <= '0;
    else if (csr_we_i && csr_sel) base_q <= csr_wdata_i;
  end

  assign mem_req_o  = ldp_issue_i;
  assign mem_addr_o = WORD_OFFSET ? base_q + {10'd0, ldp_offset_i, 2'b00}
                                  : base_q + {12'd0, ldp_offset_i};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q <= 1'b0;
      hi_q   <= 1'b0;
    end else if (ldp_issue_i) begin
      pend_q <= 1'b1;
      hi_q   <= ldp_hi_i;
    end else if (mem_rvalid_i) begin
      pend_q <= 1'b0;
    end
  end

  assign patch_we_o    = mem_rvalid_i & pend_q;
  assign patch_hi_o    = hi_q;
  assign patch_wdata_o = mem_rdata_i;
  assign busy_o        = ldp_issue_i | pend_q;

  // Handshake rules: one ldp outstanding; a reply only answers a request.
  a_one_outstanding: assert property (@(posedge clk_i) disable iff (!rst_ni)
    ldp_issue_i |-> !pend_q || mem_rvalid_i);
  a_reply_expected: assert property (@(posedge clk_i) disable iff (!rst_ni)
    mem_rvalid_i |-> pend_q);

endmodule
