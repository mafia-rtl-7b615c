// tb_mafia_sig_crc32 -- checks the CRC32 signature step.
// Fixed vectors were computed with an independent software CRC
// (polynomial 0xF4ACFB13 in normal form, MSB first, no reflection). Random
// vectors are checked against polynomial long division of
// S*x^64 + D*x^32 by the generator, a different formulation of the same CRC.
module tb_mafia_sig_crc32;
  logic [31:0] sig_i, sig_o;
  logic [63:0] data_i;
  int checks = 0, failures = 0;

  mafia_sig_crc32 dut (.sig_i(sig_i), .data_i(data_i), .sig_o(sig_o));

  function automatic logic [31:0] crc_div(logic [31:0] s, logic [63:0] d);
    logic [95:0] m;
    logic [32:0] g;
    m = {s, 64'd0} ^ {d, 32'd0};   // S*x^64 + D*x^32
    g = {1'b1, 32'hF4ACFB13};
    // remainder of m by g, bit by bit from the top
    for (int i = 95; i >= 32; i--)
      if (m[i]) m[i -: 33] = m[i -: 33] ^ g;
    return m[31:0];
  endfunction

  task automatic check(logic [31:0] s, logic [63:0] d, logic [31:0] exp);
    sig_i = s; data_i = d; #1;
    checks++;
    if (sig_o != exp) begin
      failures++;
      $display("FAIL crc(%h,%h) = %h expected %h", s, d, sig_o, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h00000000, 64'h0123456789abcdef, 32'hf09f0704);
    check(32'hffffffff, 64'h0000000000000000, 32'hc9d16c03);
    check(32'h00000000, 64'h8000000000000000, 32'hae5f710f);
    check(32'h12345678, 64'hdeadbeefcafef00d, 32'hb39394b6);
    check(32'ha5a5a5a5, 64'hffffffffffffffff, 32'hd28f4494);
    for (int i = 0; i < 200; i++) begin
      logic [31:0] s;
      logic [63:0] d;
      s = $urandom; d = {$urandom, $urandom};
      check(s, d, crc_div(s, d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
