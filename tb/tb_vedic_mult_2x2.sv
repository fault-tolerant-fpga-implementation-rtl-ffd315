// tb_vedic_mult_2x2: exhaustive check of the 2x2 multiplier.
module tb_vedic_mult_2x2;
  logic [1:0] a, b;
  logic [3:0] p;
  int checks = 0, failures = 0;

  vedic_mult_2x2 dut (.a(a), .b(b), .p(p));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      {a, b} = 4'(v);
      #1;
      checks++;
      if (p != 4'(int'(a) * int'(b))) begin
        failures++;
        $display("FAIL %0d * %0d -> %0d", a, b, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
