// tb_sram_sp: random reads and byte-masked writes against a reference array;
// checks one-cycle read latency and that rdata holds while en is low.
`timescale 1ns/1ps
module tb_sram_sp;
  logic clk = 1'b0, en, we;
  logic [3:0] be;
  logic [9:0] addr;
  logic [31:0] wdata, rdata, expv, held;
  logic [31:0] model [1024];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sram_sp dut (.*);
  initial begin
    en = 0; we = 0; be = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); en = 1; we = 1; be = 4'hF; addr = 10'(i); wdata = $urandom; model[i] = wdata;
    end
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      en = ($urandom % 4 != 0); we = 1'($urandom); be = 4'($urandom);
      addr = 10'($urandom % 64); wdata = $urandom;
      expv = model[addr];
      if (en && we) for (int b = 0; b < 4; b++) if (be[b]) model[addr][8*b +: 8] = wdata[8*b +: 8];
      held = rdata;
      @(posedge clk); #1;
      if (en && !we) begin
        checks++;
        if (rdata !== expv) begin failures++; $display("FAIL read %h %h", rdata, expv); end
      end else if (!en) begin
        checks++;
        if (rdata !== held) begin failures++; $display("FAIL hold"); end
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
