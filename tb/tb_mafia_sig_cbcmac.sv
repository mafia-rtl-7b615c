// tb_mafia_sig_cbcmac -- checks the CBC-MAC/PRINCE chaining step
// E_K(S ^ m) against values from an independent software model, including
// a three-block chain, then a 500-step chain under a random key against a
// reference PRINCE written here (checked first with the published vectors).
module tb_mafia_sig_cbcmac;
  logic [63:0]  s, d, o;
  logic [127:0] key;
  int checks = 0, failures = 0;

  mafia_sig_cbcmac dut (.sig_i(s), .data_i(d), .key_i(key), .sig_o(o));

  task automatic check(logic [63:0] si, logic [63:0] di, logic [63:0] exp);
    s = si; d = di; #1;
    checks++;
    if (o != exp) begin
      failures++;
      $display("FAIL mac(%h,%h) = %h expected %h", si, di, o, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference PRINCE --------------------------------------------------------
  // State as 16 nibbles, nibble 0 the most significant.
  typedef logic [3:0] nib16_t [16];

  function automatic nib16_t to_n(logic [63:0] x);
    nib16_t n;
    for (int i = 0; i < 16; i++) n[i] = x[63-4*i -: 4];
    return n;
  endfunction

  function automatic logic [63:0] from_n(nib16_t n);
    logic [63:0] x;
    for (int i = 0; i < 16; i++) x[63-4*i -: 4] = n[i];
    return x;
  endfunction

  function automatic logic [3:0] sbox(logic [3:0] v, logic inv);
    logic [63:0] fwd, bwd;
    fwd = 64'hBF32AC916780E5D4;
    bwd = 64'hB732FD89A6405EC1;
    return inv ? bwd[63-4*v -: 4] : fwd[63-4*v -: 4];
  endfunction

  function automatic logic [63:0] rc(int i);
    logic [63:0] t [12];
    t = '{64'h0, 64'h13198a2e03707344, 64'ha4093822299f31d0, 64'h082efa98ec4e6c89,
          64'h452821e638d01377, 64'hbe5466cf34e90c6c, 64'h7ef84f78fd955cb1,
          64'h85840851f1ac43aa, 64'hc882d32f25323c54, 64'h64a51195e0e3610d,
          64'hd3b5a399ca0c2399, 64'hc0ac29b7c97c50dd};
    return t[i];
  endfunction

  function automatic logic [63:0] sub(logic [63:0] x, logic inv);
    nib16_t n;
    n = to_n(x);
    for (int i = 0; i < 16; i++) n[i] = sbox(n[i], inv);
    return from_n(n);
  endfunction

  // M': on each 16-bit column, output bit b of nibble j is the xor of bit b
  // of all four input nibbles except nibble (b - j - off) mod 4, with
  // off = 1 for the two middle columns.
  function automatic logic [63:0] mp(logic [63:0] x);
    nib16_t n, o;
    n = to_n(x);
    for (int c = 0; c < 4; c++) begin
      int off;
      off = (c == 1 || c == 2) ? 1 : 0;
      for (int j = 0; j < 4; j++) begin
        o[4*c+j] = 4'h0;
        for (int b = 0; b < 4; b++) begin
          logic bit_v;
          bit_v = 1'b0;
          for (int k = 0; k < 4; k++)
            if (((j + k + off) % 4) != b) bit_v ^= n[4*c+k][3-b];
          o[4*c+j][3-b] = bit_v;
        end
      end
    end
    return from_n(o);
  endfunction

  // ShiftRows on the 4x4 nibble matrix stored column by column.
  function automatic logic [63:0] sr(logic [63:0] x, logic inv);
    nib16_t n, o;
    n = to_n(x);
    for (int col = 0; col < 4; col++)
      for (int row = 0; row < 4; row++)
        if (!inv) o[4*col+row] = n[4*((col+row)%4)+row];
        else      o[4*((col+row)%4)+row] = n[4*col+row];
    return from_n(o);
  endfunction

  function automatic logic [63:0] prince(logic [63:0] p, logic [127:0] k);
    logic [63:0] k0, k1, x;
    k0 = k[127:64]; k1 = k[63:0];
    x = p ^ k0 ^ k1 ^ rc(0);
    for (int r = 1; r <= 5; r++) x = sr(mp(sub(x, 0)), 0) ^ rc(r) ^ k1;
    x = sub(mp(sub(x, 0)), 1);
    for (int r = 6; r <= 10; r++) x = sub(mp(sr(x ^ rc(r) ^ k1, 1)), 1);
    x = x ^ rc(11) ^ k1;
    return x ^ {k0[0], k0[63:1]} ^ (k0 >> 63);
  endfunction

  initial begin
    logic [63:0] chain;
    checks += 2;
    if (prince(64'h0, {64'h0, 64'h0}) != 64'h818665aa0d02dfda) failures++;
    if (prince(64'h0123456789abcdef, {64'h0, 64'hfedcba9876543210}) != 64'hae25ad3ca8fa9ccf) failures++;
    key = 128'h0f1e2d3c4b5a69788796a5b4c3d2e1f0;
    check(64'h0000000000000000, 64'h0000000000000000, 64'h3eabcc7bd89d07ff);
    check(64'h0123456789abcdef, 64'hfedcba9876543210, 64'hda5d11c7df2a3432);
    check(64'h0000000000000000, 64'h1111222233334444, 64'hc3d3aad32f6ccbae);
    check(64'hc3d3aad32f6ccbae, 64'h5555666677778888, 64'h83cf9d6627a516a9);
    check(64'h83cf9d6627a516a9, 64'h9999aaaabbbbcccc, 64'hb0d5a4a429e91901);
    check(64'hb1f6e1c3a042d4ee, 64'hdddd0000eeee0000, 64'h9749085a0b482288);
    key = {$urandom, $urandom, $urandom, $urandom};
    chain = {$urandom, $urandom};
    for (int i = 0; i < 500; i++) begin
      logic [63:0] m, e;
      m = {$urandom, $urandom};
      e = prince(chain ^ m, key);
      check(chain, m, e);
      chain = o;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
