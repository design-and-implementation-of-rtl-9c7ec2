// tb_mem_protect: random shares, keys and random numbers for both
// configurations of the protection unit (main memory: 10-bit address, 32-bit
// data; register file: two 9-bit addresses, 2-bit data). Checks the scrambled
// address, the encrypted write word, the read shares (recombining to the
// decrypted word, share 2 equal to the random number) and the unmasked
// control bits, then a write/read round trip through a small SRAM model.
`timescale 1ns/1ps
module tb_mem_protect;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // main memory configuration
  logic [9:0]       ak;   logic [31:0] dk;
  logic [0:0][9:0]  a1, a2, ao;
  logic [31:0]      w1, w2, we_, re_, rn, r1, r2;
  logic [5:0]       c1, c2, co;
  mem_protect #(.AW(10), .DW(32), .N_ADDR(1), .CW(6)) u_m (
    .addr_key(ak), .data_key(dk), .addr_s1(a1), .addr_s2(a2), .addr_out(ao),
    .wdata_s1(w1), .wdata_s2(w2), .wdata_enc(we_), .rdata_enc(re_), .rnd(rn),
    .rdata_s1(r1), .rdata_s2(r2), .ctrl_s1(c1), .ctrl_s2(c2), .ctrl(co));

  // register-file configuration
  logic [8:0]       bk;   logic [1:0] ek;
  logic [1:0][8:0]  b1, b2, bo;
  logic [1:0]       x1, x2, xe, ye, yn, y1, y2;
  logic [1:0]       d1, d2, dco;
  mem_protect #(.AW(9), .DW(2), .N_ADDR(2), .CW(2)) u_r (
    .addr_key(bk), .data_key(ek), .addr_s1(b1), .addr_s2(b2), .addr_out(bo),
    .wdata_s1(x1), .wdata_s2(x2), .wdata_enc(xe), .rdata_enc(ye), .rnd(yn),
    .rdata_s1(y1), .rdata_s2(y2), .ctrl_s1(d1), .ctrl_s2(d2), .ctrl(dco));

  logic [31:0] sram [1024];
  logic [31:0] vals [64];

  initial begin
    for (int t = 0; t < 500; t++) begin
      ak = 10'($urandom); dk = $urandom; a1 = 10'($urandom); a2 = 10'($urandom);
      w1 = $urandom; w2 = $urandom; re_ = $urandom; rn = $urandom;
      c1 = 6'($urandom); c2 = 6'($urandom);
      bk = 9'($urandom); ek = 2'($urandom); b1 = 18'($urandom); b2 = 18'($urandom);
      x1 = 2'($urandom); x2 = 2'($urandom); ye = 2'($urandom); yn = 2'($urandom);
      d1 = 2'($urandom); d2 = 2'($urandom);
      #1;
      check(ao[0] == (a1[0] ^ a2[0] ^ ak), "main address scrambled with key");
      check(we_ == (w1 ^ w2 ^ dk), "main write data encrypted");
      check((r1 ^ r2) == (re_ ^ dk) && r2 == rn, "main read shares");
      check(co == (c1 ^ c2), "main control unmasked");
      for (int a = 0; a < 2; a++) check(bo[a] == (b1[a] ^ b2[a] ^ bk), "rf address");
      check(xe == (x1 ^ x2 ^ ek), "rf write data");
      check((y1 ^ y2) == (ye ^ ek) && y2 == yn, "rf read shares");
      check(dco == (d1 ^ d2), "rf control");
    end
    // round trip: write 64 words through the unit, read them back
    ak = 10'h2A5; dk = 32'hC3A5_0F1E;
    for (int i = 0; i < 64; i++) begin
      logic [31:0] v, m;
      logic [9:0]  am;
      v = $urandom ^ i; m = $urandom; am = 10'($urandom);
      a1 = 10'(i) ^ am; a2 = am; w1 = v ^ m; w2 = m; #1;
      sram[ao[0]] = we_;
      vals[i] = v;
      check(we_ != v || dk == 0, "stored word is not the plain word");
    end
    for (int i = 0; i < 64; i++) begin
      logic [9:0] am;
      am = 10'($urandom);
      a1 = 10'(i) ^ am; a2 = am; #1;
      re_ = sram[ao[0]]; rn = $urandom; #1;
      check((r1 ^ r2) == vals[i] && r1 != vals[i], "round trip returns the word, masked");
      a1 = 10'(i); a2 = 0; w1 = 0; w2 = 0; #1;
      check(ao[0] == (10'(i) ^ ak), "physical address is scrambled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
