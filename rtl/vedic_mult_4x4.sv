// vedic_mult_4x4: unsigned 4x4 Vedic (Urdhva-Tiryagbhyam) multiplier.
// The operands are split into 2-bit halves; four 2x2 multipliers
// (vedic_mult_2x2) form the vertical (aH*bH, aL*bL) and crosswise (aH*bL, aL*bH) partial
// products, and vedic_combine adds them with three 4-bit ripple-carry adders.
// The 4x4 stage is the source's diagram; the 8x8 and 16x16 stages repeat it one
// level up each, which is how the 16-bit multiplier the design uses is built.
// Interface: a, b (4 bits) -> p (8 bits). Combinational.
module vedic_mult_4x4 (
  input  logic [3:0] a,
  input  logic [3:0] b,
  output logic [7:0] p
);
  logic [3:0] m0, m1, m2, m3;

  vedic_mult_2x2 u_m0 (.a(a[1:0]), .b(b[1:0]), .p(m0));
  vedic_mult_2x2 u_m1 (.a(a[1:0]), .b(b[3:2]), .p(m1));
  vedic_mult_2x2 u_m2 (.a(a[3:2]), .b(b[1:0]), .p(m2));
  vedic_mult_2x2 u_m3 (.a(a[3:2]), .b(b[3:2]), .p(m3));

  vedic_combine #(.W(4)) u_comb (.m0(m0), .m1(m1), .m2(m2), .m3(m3), .p(p));
endmodule
