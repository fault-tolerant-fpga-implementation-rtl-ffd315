// vedic_mult_8x8: unsigned 8x8 Vedic (Urdhva-Tiryagbhyam) multiplier.
// The operands are split into 4-bit halves; four 4x4 multipliers
// (vedic_mult_4x4) form the vertical (aH*bH, aL*bL) and crosswise (aH*bL, aL*bH) partial
// products, and vedic_combine adds them with three 8-bit ripple-carry adders.
// The 4x4 stage is the source's diagram; the 8x8 and 16x16 stages repeat it one
// level up each, which is how the 16-bit multiplier the design uses is built.
// Interface: a, b (8 bits) -> p (16 bits). Combinational.
module vedic_mult_8x8 (
  input  logic [7:0] a,
  input  logic [7:0] b,
  output logic [15:0] p
);
  logic [7:0] m0, m1, m2, m3;

  vedic_mult_4x4 u_m0 (.a(a[3:0]), .b(b[3:0]), .p(m0));
  vedic_mult_4x4 u_m1 (.a(a[3:0]), .b(b[7:4]), .p(m1));
  vedic_mult_4x4 u_m2 (.a(a[7:4]), .b(b[3:0]), .p(m2));
  vedic_mult_4x4 u_m3 (.a(a[7:4]), .b(b[7:4]), .p(m3));

  vedic_combine #(.W(8)) u_comb (.m0(m0), .m1(m1), .m2(m2), .m3(m3), .p(p));
endmodule
