// mafia_sig_cbcmac -- CBC-MAC/PRINCE signature function f(S, pipeline state).
//
// One CBC-MAC chaining step per instruction: the 64-bit pipeline state is
// one message block, xored into the running 64-bit tag and encrypted with
// the fully unrolled PRINCE cipher under the secret 128-bit key, so the
// step completes in one clock cycle. Because the key is secret, valid
// reference signatures can only be produced by its holder, which gives code
// authenticity on top of integrity. The monitor verifies the low 32 bits of
// the tag. The chaining form E_K(S ^ m) is the textbook CBC-MAC; the paper
// names the construction without spelling it out.
//
// Interface: sig_i, data_i, key_i in; sig_o out. Purely combinational.
module mafia_sig_cbcmac (
  input  logic [63:0]  sig_i,
  input  logic [63:0]  data_i,
  input  logic [127:0] key_i,
  output logic [63:0]  sig_o
);

  prince_cipher u_prince (
    .data_i (sig_i ^ data_i),
    .key_i  (key_i),
    .data_o (sig_o)
  );

endmodule
