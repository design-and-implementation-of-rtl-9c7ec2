// tb_rng_nist: workload test of the random number generator with three of
// the NIST SP 800-22 statistical tests on 100 bitstreams of 1 M bits each.
//
// The RNG chain runs at its default sizes: sampler with metastability
// filter, LFSR-43/CASR-37 post-processing and the 243-output XOR network.
// The system clock stands for the 226 MHz oscillator; the sample divider
// ratio 67 gives about 3.4 MHz sampling. The entropy oscillator is modelled
// as a 366 MHz square wave whose phase advances with a small random jitter
// every system cycle, which gives raw bits with far less than one bit of
// entropy each, as a real jitter source does.
//
// Stream s is output bit s of the XOR network over 1 M successive system
// cycles, so the 100 streams are read out in parallel. (Bits of one output
// word are not independent: 243 outputs come from 80 state bits, so any
// four outputs that pair two LFSR stages with two CASR cells XOR to zero.
// A stream made of whole words therefore fails block tests.) Per stream the frequency
// (monobit), block-frequency (M = 128) and runs tests are computed; the
// block-frequency p-value uses the Wilson-Hilferty normal approximation of
// the chi-square distribution. A test passes when at least 96 of 100
// streams have p >= 0.01 (the SP 800-22 proportion rule for 100 streams).
// The test code itself is checked first on a stream with 52 % ones, which
// the frequency test must reject.
`timescale 1ns/1ps
module tb_rng_nist;
  import secure_rv_pkg::*;

  localparam int N_STREAMS = 100;
  localparam int N_BITS    = 1_000_000;
  localparam int M_BLK     = 128;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2.2 clk = ~clk;

  logic              ro_in, smp_clk, smp_tick, raw_bit, raw_valid, ready;
  logic [42:0]       lfsr;
  logic [36:0]       casr;
  logic [RAND_W-1:0] rnd;

  clk_divider  u_div  (.clk, .rst_n, .div(8'd66), .clk_out(smp_clk), .tick(smp_tick));
  rng_sampler  u_smp  (.clk, .rst_n, .ro_in, .sample_tick(smp_tick), .raw_bit, .raw_valid);
  rng_postproc u_post (.clk, .rst_n, .raw_bit, .raw_valid, .lfsr, .casr, .ready);
  rng_xor_net  u_xnet (.lfsr, .casr, .rnd);

  // entropy oscillator: phase in units of its period
  real phase = 0.0;
  always @(posedge clk) begin
    phase = phase + 366.0 / 226.0 + 0.02 * (real'($urandom % 2001) / 1000.0 - 1.0);
    phase = phase - $floor(phase);
    ro_in <= (phase < 0.5);
  end

  int checks = 0, failures = 0;
  bit done = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic real erfc(input real x);
    real z, t, r;
    z = (x < 0.0) ? -x : x;
    t = 1.0 / (1.0 + 0.5 * z);
    r = t * $exp(-z * z - 1.26551223 + t * (1.00002368 + t * (0.37409196 + t * (0.09678418 +
        t * (-0.18628806 + t * (0.27886807 + t * (-1.13520398 + t * (1.48851587 +
        t * (-0.82215223 + t * 0.17087277)))))))));
    return (x >= 0.0) ? r : 2.0 - r;
  endfunction

  function automatic real fabs(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // running statistics, one set per stream
  int   n [N_STREAMS], ones [N_STREAMS], runs [N_STREAMS], blk_ones [N_STREAMS], nblk [N_STREAMS];
  real  chi [N_STREAMS];
  bit   prev [N_STREAMS];
  task automatic reset_stats(input int s);
    n[s] = 0; ones[s] = 0; runs[s] = 0; blk_ones[s] = 0; nblk[s] = 0; chi[s] = 0.0; prev[s] = 1'b0;
  endtask
  task automatic add_bit(input int s, input bit b);
    if (n[s] == 0 || b != prev[s]) runs[s]++;
    prev[s] = b;
    ones[s] += int'(b);
    blk_ones[s] += int'(b);
    n[s]++;
    if (n[s] % M_BLK == 0) begin
      real pi_i;
      pi_i = real'(blk_ones[s]) / M_BLK;
      chi[s] += (pi_i - 0.5) * (pi_i - 0.5);
      blk_ones[s] = 0;
      nblk[s]++;
    end
  endtask
  task automatic p_values(input int st, output real p_freq, p_blk, p_runs);
    real s, pi, chi2, k, wh, nn;
    nn     = real'(n[st]);
    s      = fabs(2.0 * ones[st] - nn);
    p_freq = erfc(s / $sqrt(2.0 * nn));
    chi2   = 4.0 * M_BLK * chi[st];
    k      = real'(nblk[st]);
    wh     = ($pow(chi2 / k, 1.0 / 3.0) - (1.0 - 2.0 / (9.0 * k))) / $sqrt(2.0 / (9.0 * k));
    p_blk  = 0.5 * erfc(wh / $sqrt(2.0));
    pi     = real'(ones[st]) / nn;
    if (fabs(pi - 0.5) >= 2.0 / $sqrt(nn)) p_runs = 0.0;
    else p_runs = erfc(fabs(runs[st] - 2.0 * nn * pi * (1.0 - pi)) /
                       (2.0 * $sqrt(2.0 * nn) * pi * (1.0 - pi)));
  endtask

  initial begin
    int  pass_f, pass_b, pass_r;
    real pf, pb, pr, pf_min;
    void'($urandom(32'h0515_7a75));

    // the test code must reject a biased stream
    reset_stats(0);
    for (int i = 0; i < N_BITS; i++) add_bit(0, ($urandom % 100) < 52);
    p_values(0, pf, pb, pr);
    check(pf < 1.0e-6, $sformatf("biased stream: frequency p = %g", pf));
    check(pr < 0.01,   $sformatf("biased stream: runs p = %g", pr));

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (ready);
    @(posedge clk);
    pass_f = 0; pass_b = 0; pass_r = 0; pf_min = 1.0;
    for (int s = 0; s < N_STREAMS; s++) reset_stats(s);
    for (int i = 0; i < N_BITS; i++) begin
      @(posedge clk);
      for (int s = 0; s < N_STREAMS; s++) add_bit(s, rnd[s]);
    end
    for (int s = 0; s < N_STREAMS; s++) begin
      p_values(s, pf, pb, pr);
      if (pf >= 0.01) pass_f++;
      if (pb >= 0.01) pass_b++;
      if (pr >= 0.01) pass_r++;
      if (pf < pf_min) pf_min = pf;
    end
    $display("NIST proportions (of %0d): frequency %0d, block frequency %0d, runs %0d; lowest frequency p %g",
             N_STREAMS, pass_f, pass_b, pass_r, pf_min);
    check(pass_f >= 96, "frequency test proportion");
    check(pass_b >= 96, "block-frequency test proportion");
    check(pass_r >= 96, "runs test proportion");
    done = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    if (!done) begin
      failures++;
      $display("FAIL watchdog");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
