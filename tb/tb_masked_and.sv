// tb_masked_and: exhaustive check of the two-share masked AND gate. For all
// 16 combinations of (x1, x2, y1, y2) the recombined output z1 ^ z2 must
// equal (x1 ^ x2) AND (y1 ^ y2).
module tb_masked_and;
  logic x1, x2, y1, y2, z1, z2;
  int checks = 0, failures = 0;
  masked_and dut (.*);
  initial begin
    for (int v = 0; v < 16; v++) begin
      {x1, x2, y1, y2} = 4'(v);
      #1;
      checks++;
      if ((z1 ^ z2) !== ((x1 ^ x2) & (y1 ^ y2))) begin
        failures++;
        $display("FAIL x=%b%b y=%b%b z=%b%b", x1, x2, y1, y2, z1, z2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
