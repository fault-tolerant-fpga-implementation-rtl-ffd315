// vedic_mult_16x16: unsigned 16x16 Vedic (Urdhva-Tiryagbhyam) multiplier.
// The operands are split into 8-bit halves; four 8x8 multipliers
// (vedic_mult_8x8) form the vertical (aH*bH, aL*bL) and crosswise (aH*bL, aL*bH) partial
// products, and vedic_combine adds them with three 16-bit ripple-carry adders.
// The 4x4 stage is the source's diagram; the 8x8 and 16x16 stages repeat it one
// level up each, which is how the 16-bit multiplier the design uses is built.
// Interface: a, b (16 bits) -> p (32 bits). Combinational.
module vedic_mult_16x16 (
  input  logic [15:0] a,
  input  logic [15:0] b,
  output logic [31:0] p
);
  logic [15:0] m0, m1, m2, m3;

  vedic_mult_8x8 u_m0 (.a(a[7:0]), .b(b[7:0]), .p(m0));
  vedic_mult_8x8 u_m1 (.a(a[7:0]), .b(b[15:8]), .p(m1));
  vedic_mult_8x8 u_m2 (.a(a[15:8]), .b(b[7:0]), .p(m2));
  vedic_mult_8x8 u_m3 (.a(a[15:8]), .b(b[15:8]), .p(m3));

  vedic_combine #(.W(16)) u_comb (.m0(m0), .m1(m1), .m2(m2), .m3(m3), .p(p));
endmodule
