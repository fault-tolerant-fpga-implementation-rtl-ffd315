// tb_carry_save_adder: the 16-bit three-operand carry-save adder against
// integer addition, on corner operands and random operands.
module tb_carry_save_adder;
  localparam int W = 16;
  logic [W-1:0] a, b, c;
  logic [W+1:0] sum;
  int checks = 0, failures = 0;

  carry_save_adder dut (.a(a), .b(b), .c(c), .sum(sum));

  task automatic check(input logic [W-1:0] x, input logic [W-1:0] y, input logic [W-1:0] z);
    int unsigned expect_s;
    a = x; b = y; c = z;
    #1;
    expect_s = int'(x) + int'(y) + int'(z);
    checks++;
    if (sum != (W+2)'(expect_s)) begin
      failures++;
      if (failures < 10) $display("FAIL %0d + %0d + %0d -> %0d", x, y, z, sum);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check('0, '0, '0);
    check('1, '1, '1);
    check('1, '0, '0);
    check('1, W'(1), '0);
    check(W'(16'h5555), W'(16'haaaa), W'(16'hffff));
    for (int n = 0; n < 20000; n++) check(W'($urandom), W'($urandom), W'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
