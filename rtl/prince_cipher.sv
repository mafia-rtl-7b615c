// prince_cipher -- fully unrolled PRINCE block cipher (encryption only).
//
// PRINCE encrypts a 64-bit block under a 128-bit key k0||k1 in twelve
// rounds with no clock: whitening with k0, the PRINCE core keyed with k1
// (five forward rounds S-box / linear layer M / constant+key, a middle
// S / M' / S^-1 layer, five inverse rounds), then whitening with
// k0' = (k0 >>> 1) ^ (k0 >> 63). The S-box, the M' matrices built from the
// four 4x4 matrices M0..M3, the nibble shift and the round constants are
// those of the published cipher; nibble 0 is the most significant nibble.
// MAFIA uses it as the block cipher of its single-cycle CBC-MAC signature.
//
// Interface: data_i (plaintext), key_i = {k0, k1}; data_o (ciphertext).
// Purely combinational.
module prince_cipher (
  input  logic [63:0]  data_i,
  input  logic [127:0] key_i,
  output logic [63:0]  data_o
);

  localparam logic [3:0] SBOX [16] = '{4'hB, 4'hF, 4'h3, 4'h2, 4'hA, 4'hC, 4'h9, 4'h1,
                                       4'h6, 4'h7, 4'h8, 4'h0, 4'hE, 4'h5, 4'hD, 4'h4};
  localparam logic [3:0] SINV [16] = '{4'hB, 4'h7, 4'h3, 4'h2, 4'hF, 4'hD, 4'h8, 4'h9,
                                       4'hA, 4'h6, 4'h4, 4'h0, 4'h5, 4'hE, 4'hC, 4'h1};
  localparam logic [63:0] RC [12] = '{
    64'h0000000000000000, 64'h13198a2e03707344, 64'ha4093822299f31d0,
    64'h082efa98ec4e6c89, 64'h452821e638d01377, 64'hbe5466cf34e90c6c,
    64'h7ef84f78fd955cb1, 64'h85840851f1ac43aa, 64'hc882d32f25323c54,
    64'h64a51195e0e3610d, 64'hd3b5a399ca0c2399, 64'hc0ac29b7c97c50dd};
  // Output nibble i of the shift takes input nibble SR[i].
  localparam int SR [16] = '{0, 5, 10, 15, 4, 9, 14, 3, 8, 13, 2, 7, 12, 1, 6, 11};

  function automatic logic [3:0] nib(logic [63:0] x, int i);
    return x[63-4*i -: 4];
  endfunction

  function automatic logic [63:0] s_layer(logic [63:0] x, logic inv);
    logic [63:0] y;
    for (int i = 0; i < 16; i++) y[63-4*i -: 4] = inv ? SINV[nib(x, i)] : SBOX[nib(x, i)];
    return y;
  endfunction

  // M-hat on four nibbles (chunk c = nibbles 4c..4c+3): output nibble j is
  // the xor over k of M_{(j+k+off) mod 4} * nibble k, where M_m is the
  // identity with bit m (counted from the nibble's MSB) cleared.
  function automatic logic [63:0] m_prime(logic [63:0] x);
    logic [63:0] y;
    int off;
    for (int c = 0; c < 4; c++) begin
      off = (c == 1 || c == 2) ? 1 : 0;
      for (int j = 0; j < 4; j++) begin
        logic [3:0] v;
        v = 4'h0;
        for (int k = 0; k < 4; k++)
          v ^= nib(x, 4*c + k) & ~(4'b1000 >> ((j + k + off) % 4));
        y[63-4*(4*c+j) -: 4] = v;
      end
    end
    return y;
  endfunction

  function automatic logic [63:0] shift_rows(logic [63:0] x);
    logic [63:0] y;
    for (int i = 0; i < 16; i++) y[63-4*i -: 4] = nib(x, SR[i]);
    return y;
  endfunction

  function automatic logic [63:0] shift_rows_inv(logic [63:0] x);
    logic [63:0] y;
    for (int i = 0; i < 16; i++) y[63-4*SR[i] -: 4] = nib(x, i);
    return y;
  endfunction

  logic [63:0] k0, k0p, k1;
  assign k0  = key_i[127:64];
  assign k1  = key_i[63:0];
  assign k0p = {k0[0], k0[63:1]} ^ {63'd0, k0[63]};

  always_comb begin
    logic [63:0] x;
    x = data_i ^ k0;
    x = x ^ k1 ^ RC[0];
    for (int r = 1; r <= 5; r++) begin
      x = s_layer(x, 1'b0);
      x = shift_rows(m_prime(x));
      x = x ^ RC[r] ^ k1;
    end
    x = s_layer(x, 1'b0);
    x = m_prime(x);
    x = s_layer(x, 1'b1);
    for (int r = 6; r <= 10; r++) begin
      x = x ^ RC[r] ^ k1;
      x = m_prime(shift_rows_inv(x));
      x = s_layer(x, 1'b1);
    end
    x = x ^ RC[11] ^ k1;
    data_o = x ^ k0p;
  end

endmodule
