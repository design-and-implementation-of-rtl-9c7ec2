// tb_clk_divider: measures period and high time of the divided clock for a
// set of ratios (2, 3, 4, 7, 16, 65, 255, 256) and checks that tick pulses
// exactly once per period, in the cycle where the divided clock rises.
`timescale 1ns/1ps
module tb_clk_divider;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] div;
  logic clk_out, tick;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  clk_divider dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int ratios [8] = '{2, 3, 4, 7, 16, 65, 255, 256};
    foreach (ratios[k]) begin
      int n, hi, ticks;
      logic prev;
      n = ratios[k];
      rst_n = 1'b0;
      div = 8'(n - 1);
      repeat (2) @(posedge clk);
      rst_n <= 1'b1;
      repeat (2 * n + 3) @(posedge clk);   // settle
      #1;
      // measure over 3 periods, starting at a rising edge
      do begin prev = clk_out; @(posedge clk); #1; end while (!tick);
      hi = 0; ticks = 0;
      for (int c = 0; c < 3 * n; c++) begin
        hi    += clk_out;
        ticks += tick;
        if (tick) check(clk_out && !prev, $sformatf("tick not at rising edge, N=%0d", n));
        prev = clk_out;
        @(posedge clk); #1;
      end
      check(hi == 3 * (n / 2), $sformatf("N=%0d high time %0d", n, hi));
      check(ticks == 3, $sformatf("N=%0d ticks %0d", n, ticks));
      check(clk_out && tick, $sformatf("N=%0d period", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
