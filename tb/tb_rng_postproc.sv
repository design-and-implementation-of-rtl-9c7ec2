// tb_rng_postproc: checks the RNG post-processing against an independent
// bit-level model written from the definitions: the 80-bit serial init, the
// XNOR LFSR recurrence (taps 43, 42, 38, 37), rules 90/150 of the CASR with
// null boundaries, and the XOR of a new raw bit into the LFSR feedback and
// CASR cells 1 and 37. Raw bits arrive on random cycles. It also runs the
// unperturbed registers and checks that neither returns to its start state
// within 20000 cycles, and that the LFSR/CASR outputs are balanced.
`timescale 1ns/1ps
module tb_rng_postproc;
  logic clk = 1'b0, rst_n = 1'b0;
  logic raw_bit, raw_valid, ready;
  logic [42:0] lfsr;
  logic [36:0] casr;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rng_postproc dut (.*);

  logic ml [1:43];
  logic mc [1:37];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic bit match();
    for (int i = 1; i <= 43; i++) if (lfsr[i-1] !== ml[i]) return 0;
    for (int i = 1; i <= 37; i++) if (casr[i-1] !== mc[i]) return 0;
    return 1;
  endfunction

  initial begin
    logic bits [80];
    logic [42:0] l0; logic [36:0] c0;
    int ones;
    raw_bit = 0; raw_valid = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // init: 80 raw bits on random cycles
    for (int k = 0; k < 80; k++) begin
      bits[k] = 1'($urandom);
      repeat ($urandom % 3) begin @(negedge clk); raw_valid = 0; end
      @(negedge clk);
      raw_valid = 1; raw_bit = bits[k];
      check(!ready, "not ready during init");
    end
    @(negedge clk); raw_valid = 0;
    check(ready, "ready after 80 raw bits");
    // bit k entered first, so bit 79 sits in LFSR stage 1, bit 0 in CASR cell 37
    for (int i = 1; i <= 43; i++) ml[i] = bits[80 - i];
    for (int i = 1; i <= 37; i++) mc[i] = bits[37 - i];
    check(match(), "state after init");
    // perturbed run
    for (int c = 0; c < 3000; c++) begin
      logic p, f;
      logic nl [1:43];
      logic nc [1:37];
      raw_valid = ($urandom % 7 == 0);
      raw_bit   = 1'($urandom);
      p = raw_valid & raw_bit;
      f = ~(ml[43] ^ ml[42] ^ ml[38] ^ ml[37]) ^ p;
      nl[1] = f;
      for (int i = 2; i <= 43; i++) nl[i] = ml[i-1];
      for (int i = 1; i <= 37; i++) begin
        nc[i] = ((i > 1) ? mc[i-1] : 1'b0) ^ ((i < 37) ? mc[i+1] : 1'b0);
        if (i == 9) nc[i] ^= mc[i];
      end
      nc[1] ^= p; nc[37] ^= p;
      @(posedge clk); #1;
      ml = nl; mc = nc;
      check(match(), $sformatf("cycle %0d state", c));
      @(negedge clk);
    end
    // unperturbed: no short cycle, balanced output
    raw_valid = 0;
    l0 = lfsr; c0 = casr; ones = 0;
    for (int c = 0; c < 20000; c++) begin
      @(posedge clk); #1;
      if (lfsr == l0) begin check(0, "LFSR short cycle"); break; end
      if (casr == c0) begin check(0, "CASR short cycle"); break; end
      ones += lfsr[0] ^ casr[0];
    end
    check(ones > 9500 && ones < 10500, $sformatf("balance %0d / 20000", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
