// tb_vedic_mult_16x16: the 16x16 Vedic multiplier against integer
// multiplication, on corner operands (0, 1, all ones, the half-word
// boundaries) and on random operands.
module tb_vedic_mult_16x16;
  localparam int W = 16;
  logic [W-1:0] a, b;
  logic [2*W-1:0] p;
  int checks = 0, failures = 0;

  vedic_mult_16x16 dut (.a(a), .b(b), .p(p));

  task automatic check(input logic [W-1:0] x, input logic [W-1:0] y);
    longint unsigned expect_p;
    a = x;
    b = y;
    #1;
    expect_p = longint'(x) * longint'(y);
    checks++;
    if (p != (2*W)'(expect_p)) begin
      failures++;
      if (failures < 10) $display("FAIL %0d * %0d -> %0d (expected %0d)", x, y, p, expect_p);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] corner [8];
    corner = '{'0, W'(1), '1, W'(1) << (W/2), (W'(1) << (W/2)) - 1,
               W'(1) << (W-1), '1 >> 1, '1 - W'(1)};
    foreach (corner[i]) foreach (corner[j]) check(corner[i], corner[j]);
    for (int n = 0; n < 20000; n++) check(W'($urandom), W'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
