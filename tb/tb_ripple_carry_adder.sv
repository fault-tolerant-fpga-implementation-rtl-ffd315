// tb_ripple_carry_adder: exhaustive check of the default 4-bit ripple-carry
// adder (all a, b, cin) against integer addition.
module tb_ripple_carry_adder;
  localparam int W = 4;
  logic [W-1:0] a, b, sum;
  logic cin, cout;
  int checks = 0, failures = 0;

  ripple_carry_adder dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << (2 * W + 1)); v++) begin
      {cin, a, b} = (2 * W + 1)'(v);
      #1;
      checks++;
      if ({cout, sum} != (W + 1)'(int'(a) + int'(b) + int'(cin))) begin
        failures++;
        $display("FAIL %0d + %0d + %0d -> %0d", a, b, cin, {cout, sum});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
