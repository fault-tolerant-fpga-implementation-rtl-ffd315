// vedic_combine: the adder network of a Vedic multiplier stage. Given the four
// partial products of two W-bit operands split into H = W/2-bit halves,
//   m3 = aH*bH, m2 = aH*bL, m1 = aL*bH, m0 = aL*bL   (each W bits),
// three W-bit ripple-carry adders form the 2W-bit product:
//   adder 1: m2 + m1                          -> r1, carry ca1
//   adder 2: r1 + {0, m0[W-1:H]}              -> r2, carry ca2
//   adder 3: m3 + {0, ca1|ca2, r2[W-1:H]}     -> r3
//   p = {r3, r2[H-1:0], m0[H-1:0]}
// This is the 4x4 diagram's network with W as a parameter. The diagram leaves
// ca2 unconnected; ca1 and ca2 have the same weight 2^(W+H) and are never both
// 1, so this design ORs them into the bit the diagram gives ca1 (without ca2,
// 15*14 at W=4 would come out as 146). The last carry (ca3 in the diagram) is
// always 0 because the product fits in 2W bits, and is left unused.
// Interface: m0..m3 (W bits) -> p (2W bits). Combinational.
module vedic_combine #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0]   m0,
  input  logic [W-1:0]   m1,
  input  logic [W-1:0]   m2,
  input  logic [W-1:0]   m3,
  output logic [2*W-1:0] p
);
  localparam int unsigned H = W / 2;

  logic [W-1:0] r1, r2, r3;
  logic         ca1, ca2, ca3;

  ripple_carry_adder #(.W(W)) u_add1 (
    .a(m2), .b(m1), .cin(1'b0), .sum(r1), .cout(ca1));
  ripple_carry_adder #(.W(W)) u_add2 (
    .a(r1), .b({{H{1'b0}}, m0[W-1:H]}), .cin(1'b0), .sum(r2), .cout(ca2));
  ripple_carry_adder #(.W(W)) u_add3 (
    .a(m3), .b({{(H-1){1'b0}}, ca1 | ca2, r2[W-1:H]}), .cin(1'b0),
    .sum(r3), .cout(ca3));

  assign p = {r3, r2[H-1:0], m0[H-1:0]};
endmodule
