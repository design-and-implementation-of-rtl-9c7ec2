// tb_clk_randomizer: checks the clock-edge randomizer against an independent
// model of the 8-bit XNOR LFSR.
//  * serial init: after rnd_ready the state equals the eight RNG bits given;
//  * unperturbed, each state follows the XNOR recurrence and the period is 255;
//  * over one 255-cycle period exactly 63 / 128 / 191 edges are skipped for
//    the AND / XOR / OR selection, so the randomized clock toggles 192 / 127 /
//    64 times; with skipping off it toggles every cycle;
//  * skip equals the selected gate of stages 7 and 8 in every cycle;
//  * with pert_period = 32 the state departs from the recurrence only in the
//    cycles where a perturbation is due, and then by the RNG bit;
//  * the all-ones state never occurs (also asserted inside the block).
`timescale 1ns/1ps
module tb_clk_randomizer;
  import secure_rv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  skip_sel_e  skip_sel;
  logic [7:0] pert_period, lfsr;
  logic       rnd_bit, rnd_ready, rand_clk, skip, init_done;
  int checks = 0, failures = 0;
  clk_randomizer dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // lfsr[7] = stage 1 ... lfsr[0] = stage 8
  function automatic logic [7:0] step(input logic [7:0] s, input logic p);
    logic f;
    f = ~(s[0] ^ s[2] ^ s[3] ^ s[4]) ^ p;   // stages 8, 6, 5, 4
    return (({f, s[7:1]}) == 8'hFF) ? s : {f, s[7:1]};
  endfunction

  initial begin
    logic [7:0] seed, prev, s0;
    int skips, toggles, period;
    logic rc0;
    skip_sel = SKIP_OFF; pert_period = 8'd0; rnd_bit = 1'b0; rnd_ready = 1'b0;
    seed = 8'b1000_1101;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (3) @(posedge clk);
    // serial init: stage 1 receives the bits; the first bit ends in stage 8
    for (int i = 0; i < 8; i++) begin
      rnd_ready <= 1'b1;
      rnd_bit   <= seed[i];
      @(posedge clk);
    end
    rnd_ready <= 1'b0;
    #1;
    check(init_done, "init done after 8 bits");
    check(lfsr == {seed[7], seed[6], seed[5], seed[4], seed[3], seed[2], seed[1], seed[0]},
          $sformatf("init state %b", lfsr));
    // recurrence, period, skip statistics for each selection
    for (int sel = 0; sel < 4; sel++) begin
      skip_sel = skip_sel_e'(sel);
      skips = 0; toggles = 0; period = 0;
      s0 = lfsr;
      for (int c = 0; c < 255; c++) begin
        logic g;
        #1;
        case (sel)
          1: g = lfsr[1] & lfsr[0];
          2: g = lfsr[1] ^ lfsr[0];
          3: g = lfsr[1] | lfsr[0];
          default: g = 1'b0;
        endcase
        check(skip == g, "skip equals selected gate of stages 7 and 8");
        skips += skip;
        prev = lfsr;
        rc0 = rand_clk;
        @(posedge clk); #1;
        toggles += (rand_clk != rc0);
        check(lfsr == step(prev, 1'b0), $sformatf("recurrence %b -> %b", prev, lfsr));
        check(lfsr != 8'hFF, "no lock-up state");
        if (period == 0 && lfsr == s0) period = c + 1;
      end
      check(period == 255, $sformatf("period %0d", period));
      case (sel)
        1: check(skips == 63,  $sformatf("AND skips %0d", skips));
        2: check(skips == 128, $sformatf("XOR skips %0d", skips));
        3: check(skips == 191, $sformatf("OR skips %0d", skips));
        default: check(skips == 0, "off: no skip");
      endcase
      check(toggles == 255 - skips, $sformatf("toggles %0d", toggles));
      #1;
    end
    // perturbation every 32 cycles
    skip_sel = SKIP_50;
    pert_period = 8'd32;
    begin
      int due, hit;
      due = 0; hit = 0;
      for (int c = 0; c < 400; c++) begin
        logic p;
        logic [7:0] e;
        rnd_bit = 1'($urandom);
        #1;
        p = dut.pert_now;
        due += p;
        prev = lfsr;
        e = step(prev, p & rnd_bit);
        @(posedge clk); #1;
        check(lfsr == e, "perturbed recurrence");
        if (p && rnd_bit && lfsr != step(prev, 1'b0)) hit++;
      end
      check(due >= 12 && due <= 13, $sformatf("perturbations due %0d in 400 cycles", due));
      check(hit > 0, "a perturbation changed the sequence");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
