// tb_rng_xor_net: identifies, for every output, which LFSR and CASR bits it
// depends on by flipping one input bit at a time, and checks that each output
// is the XOR of exactly one LFSR bit and one CASR bit, that the pairs are
// those of the stated formula and that no pair repeats. Random states then
// check the XOR values directly.
`timescale 1ns/1ps
module tb_rng_xor_net;
  logic [42:0] lfsr;
  logic [36:0] casr;
  logic [242:0] rnd, base;
  int checks = 0, failures = 0;
  int nl [243], nc [243], pl [243], pc [243];
  rng_xor_net dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    bit seen [int];
    lfsr = '0; casr = '0; #1;
    base = rnd;
    check(base == '0, "zero state gives zero output");
    foreach (nl[k]) begin nl[k] = 0; nc[k] = 0; end
    for (int i = 0; i < 43; i++) begin
      lfsr = 43'(1) << i; casr = '0; #1;
      for (int k = 0; k < 243; k++) if (rnd[k]) begin nl[k]++; pl[k] = i; end
    end
    for (int i = 0; i < 37; i++) begin
      lfsr = '0; casr = 37'(1) << i; #1;
      for (int k = 0; k < 243; k++) if (rnd[k]) begin nc[k]++; pc[k] = i; end
    end
    for (int k = 0; k < 243; k++) begin
      check(nl[k] == 1 && nc[k] == 1, $sformatf("output %0d uses one bit of each", k));
      check(pl[k] == (7 * k + 40) % 43 && pc[k] == (11 * k) % 37, $sformatf("output %0d pair", k));
      check(!seen.exists(pl[k] * 64 + pc[k]), $sformatf("output %0d pair unique", k));
      seen[pl[k] * 64 + pc[k]] = 1;
    end
    for (int t = 0; t < 50; t++) begin
      lfsr = {$urandom, $urandom}; casr = {$urandom, $urandom}; #1;
      for (int k = 0; k < 243; k++)
        check(rnd[k] == (lfsr[pl[k]] ^ casr[pc[k]]), "xor value");
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
