// tb_mafia_patch_loader -- checks the patch base CSR (write, read, other CSR
// numbers ignored), the address of each MAFIA.ldp (byte offsets by default,
// word offsets in a second instance), busy from issue to reply, and the
// patch register write with the half select.
module tb_mafia_patch_loader;
  logic clk = 0, rst_n = 0;
  logic csr_we = 0, issue = 0, hi = 0, rvalid = 0;
  logic [11:0] csr_addr = 0;
  logic [31:0] csr_wdata = 0, rdata = 0;
  logic [19:0] ofs = 0;
  logic [31:0] csr_rdata, addr, addr_w, pw_data;
  logic req, pwe, phi, busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mafia_patch_loader dut (
    .clk_i(clk), .rst_ni(rst_n), .csr_we_i(csr_we), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata),
    .csr_rdata_o(csr_rdata), .ldp_issue_i(issue), .ldp_offset_i(ofs), .ldp_hi_i(hi),
    .mem_req_o(req), .mem_addr_o(addr), .mem_rvalid_i(rvalid), .mem_rdata_i(rdata),
    .patch_we_o(pwe), .patch_hi_o(phi), .patch_wdata_o(pw_data), .busy_o(busy));

  mafia_patch_loader #(.WORD_OFFSET(1'b1)) dut_w (
    .clk_i(clk), .rst_ni(rst_n), .csr_we_i(csr_we), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata),
    .csr_rdata_o(), .ldp_issue_i(issue), .ldp_offset_i(ofs), .ldp_hi_i(hi),
    .mem_req_o(), .mem_addr_o(addr_w), .mem_rvalid_i(rvalid), .mem_rdata_i(rdata),
    .patch_we_o(), .patch_hi_o(), .patch_wdata_o(), .busy_o());

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy, "idle after reset");
    csr_we = 1; csr_addr = 12'h7C0; csr_wdata = 32'h0004_0000;
    @(negedge clk);
    csr_addr = 12'h7C1; csr_wdata = 32'hdead_beef;   // another CSR: ignored
    @(negedge clk);
    csr_we = 0; csr_addr = 12'h7C0; #1;
    chk(csr_rdata == 32'h0004_0000, "CSR read back");
    csr_addr = 12'h300; #1;
    chk(csr_rdata == 0, "other CSR reads zero");
    for (int n = 0; n < 20; n++) begin
      int lat;
      logic [31:0] v;
      lat = 1 + ($urandom % 4);
      v = $urandom;
      ofs = 20'($urandom); hi = n[0];
      issue = 1; #1;
      chk(req && busy, "request and busy on issue");
      chk(addr == 32'h0004_0000 + {12'd0, ofs}, "byte-offset address");
      chk(addr_w == 32'h0004_0000 + {10'd0, ofs, 2'b00}, "word-offset address");
      @(negedge clk);
      issue = 0; hi = ~hi;   // the half select is captured at issue
      for (int c = 1; c < lat; c++) begin
        #1 chk(busy && !pwe, "busy while waiting");
        @(negedge clk);
      end
      rvalid = 1; rdata = v; #1;
      chk(pwe && pw_data == v && phi == n[0], "patch write with half select");
      @(negedge clk);
      rvalid = 0; #1;
      chk(!busy && !pwe, "idle after reply");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
