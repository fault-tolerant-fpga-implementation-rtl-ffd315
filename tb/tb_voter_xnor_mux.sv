// tb_voter_xnor_mux: checks voter_xnor_mux against the five-input majority.
// First every one of the 32 combinations of five input bits is applied to all
// 16 bit lanes (each lane rotated to a different combination); then random
// fault-free words with up to two corrupted modules must give the fault-free
// word, and three modules corrupted the same way must give the corrupted word.
module tb_voter_xnor_mux;
  localparam int W = 16;
  logic [W-1:0] a, b, c, d, e, y;
  int checks = 0, failures = 0;

  voter_xnor_mux dut (.a(a), .b(b), .c(c), .d(d), .e(e), .y(y));

  function automatic logic [W-1:0] maj5(input logic [W-1:0] x0, x1, x2, x3, x4);
    logic [W-1:0] r;
    for (int i = 0; i < W; i++)
      r[i] = (int'(x0[i]) + int'(x1[i]) + int'(x2[i]) + int'(x3[i]) + int'(x4[i])) >= 3;
    return r;
  endfunction

  task automatic expect_y(input logic [W-1:0] want, input string what);
    #1;
    checks++;
    if (y !== want) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: %h %h %h %h %h -> %h (expected %h)", what, a, b, c, d, e, y, want);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Exhaustive over the five bits of each lane.
    for (int base = 0; base < 32; base++) begin
      for (int i = 0; i < W; i++) begin
        logic [4:0] v;
        v = 5'((base + i) % 32);
        {a[i], b[i], c[i], d[i], e[i]} = v;
      end
      expect_y(maj5(a, b, c, d, e), "exhaustive");
    end
    // Up to two corrupted modules are outvoted; three are not.
    for (int n = 0; n < 5000; n++) begin
      logic [W-1:0] good, m0, m1;
      logic [W-1:0] w [5];
      int f0, f1, f2;
      good = W'($urandom);
      m0   = W'($urandom);
      m1   = W'($urandom);
      f0   = $urandom_range(4);
      f1   = (f0 + 1 + $urandom_range(3)) % 5;
      f2   = (f1 + 1) % 5;
      if (f2 == f0) f2 = (f2 + 1) % 5;
      for (int k = 0; k < 5; k++) w[k] = good;
      w[f0] = good ^ m0;
      {a, b, c, d, e} = {w[0], w[1], w[2], w[3], w[4]};
      expect_y(good, "one fault");
      w[f1] = good ^ m1;
      {a, b, c, d, e} = {w[0], w[1], w[2], w[3], w[4]};
      expect_y(good, "two faults");
      w[f1] = good ^ m0;
      w[f2] = good ^ m0;
      {a, b, c, d, e} = {w[0], w[1], w[2], w[3], w[4]};
      expect_y(good ^ m0, "three equal faults");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
