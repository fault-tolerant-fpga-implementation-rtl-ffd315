// tb_vedic_mult_4x4: exhaustive check of the 4x4 Vedic multiplier, all 256
// operand pairs, including those (such as 15*14) where the second adder's carry
// matters.
module tb_vedic_mult_4x4;
  logic [3:0] a, b;
  logic [7:0] p;
  int checks = 0, failures = 0;

  vedic_mult_4x4 dut (.a(a), .b(b), .p(p));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      {a, b} = 8'(v);
      #1;
      checks++;
      if (p != 8'(int'(a) * int'(b))) begin
        failures++;
        if (failures < 10) $display("FAIL %0d * %0d -> %0d", a, b, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
