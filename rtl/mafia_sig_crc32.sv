// mafia_sig_crc32 -- CRC32 signature function f(S, pipeline state).
//
// One combinational step that shifts the whole 64-bit pipeline state into
// the 32-bit running signature, so one instruction is absorbed per clock
// cycle. The generator polynomial is the paper's 0xFA567D89, chosen there
// for detecting up to 8 bit flips per basic block. That number is written in
// Koopman's notation (x^32 term implied by the top bit, +1 term dropped);
// the shift register uses the usual form {POLY[30:0], 1}, 0xF4ACFB13.
// Shifting order (most significant data bit first, not reflected, no final
// xor) is this design's choice. The initial value of a chain is whatever IV
// the signature register holds.
//
// Interface: sig_i, data_i in; sig_o out. Purely combinational.
module mafia_sig_crc32 #(
  parameter logic [31:0] POLY_KOOPMAN = 32'hFA567D89,
  parameter int unsigned DATA_W       = 64
) (
  input  logic [31:0]       sig_i,
  input  logic [DATA_W-1:0] data_i,
  output logic [31:0]       sig_o
);

  localparam logic [31:0] POLY = {POLY_KOOPMAN[30:0], 1'b1};

  always_comb begin
    logic [31:0] s;
    s = sig_i;
    for (int i = DATA_W - 1; i >= 0; i--) begin
      if (s[31] ^ data_i[i]) s = {s[30:0], 1'b0} ^ POLY;
      else                   s = {s[30:0], 1'b0};
    end
    sig_o = s;
  end

endmodule
