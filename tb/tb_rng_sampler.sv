// tb_rng_sampler: drives a random "oscillator" level and random sampling
// ticks, and checks that raw_valid pulses exactly three cycles after each
// tick with raw_bit equal to the oscillator level seen at that tick.
`timescale 1ns/1ps
module tb_rng_sampler;
  logic clk = 1'b0, rst_n = 1'b0;
  logic ro_in, sample_tick, raw_bit, raw_valid;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rng_sampler dut (.*);
  logic [7:0] hist_t, hist_v;   // tick / level history, [0] = this cycle
  initial begin
    ro_in = 1'b0; sample_tick = 1'b0; hist_t = '0; hist_v = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      ro_in       = 1'($urandom);
      sample_tick = ($urandom % 5 == 0);
      hist_t = {hist_t[6:0], sample_tick};
      hist_v = {hist_v[6:0], ro_in};
      @(posedge clk); #1;
      if (c > 4) begin
        checks++;
        if (raw_valid !== hist_t[2] || (raw_valid && raw_bit !== hist_v[2])) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d valid %b bit %b", c, raw_valid, raw_bit);
        end
      end
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
