// tb_sram_dp: simultaneous random reads and writes on the two ports against a
// reference array; a read returns the contents before a write in the same
// cycle to the same word.
`timescale 1ns/1ps
module tb_sram_dp;
  logic clk = 1'b0, re, we;
  logic [8:0] raddr, waddr;
  logic [1:0] rdata, wdata, expv;
  logic [1:0] model [512];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sram_dp dut (.*);
  initial begin
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    for (int i = 0; i < 512; i++) begin
      @(negedge clk); we = 1; waddr = 9'(i); wdata = 2'($urandom); model[i] = wdata;
    end
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      re = 1'($urandom); we = 1'($urandom);
      raddr = 9'($urandom % 32); waddr = 9'($urandom % 32); wdata = 2'($urandom);
      expv = model[raddr];
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      if (re) begin
        checks++;
        if (rdata !== expv) begin failures++; $display("FAIL read %b %b", rdata, expv); end
      end
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
