// ripple_carry_adder: W-bit adder made of a chain of full adders, the carry of
// bit i feeding bit i+1. This is the "4-bit Ripple Carry Adder" of the Vedic
// multiplier and of the carry-save adder; here the width is a parameter (default
// 4, as drawn) so the same cell serves the 8- and 16-bit stages.
// Interface: a, b (W bits), cin -> sum (W bits), cout. Combinational; the delay
// grows linearly with W.
module ripple_carry_adder #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum,
  output logic         cout
);
  logic [W:0] c;
  assign c[0] = cin;

  for (genvar i = 0; i < W; i++) begin : g_bit
    full_adder u_fa (
      .a   (a[i]),
      .b   (b[i]),
      .cin (c[i]),
      .s   (sum[i]),
      .cout(c[i+1])
    );
  end

  assign cout = c[W];
endmodule
