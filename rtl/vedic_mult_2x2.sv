// vedic_mult_2x2: 2x2 unsigned multiplier by the Urdhva-Tiryagbhyam ("vertically
// and crosswise") rule, the leaf of the Vedic multiplier. The vertical products
// a0b0 and a1b1 give the outer digits, the crosswise products a1b0 and a0b1 are
// added into the middle with two half adders:
//   p0 = a0b0, p1 = a1b0 ^ a0b1, p2 = a1b1 ^ (a1b0 & a0b1), p3 = a1b1 & a1b0 & a0b1.
// The source only names this block; the half-adder form is the usual one.
// Interface: a, b (2 bits) -> p (4 bits). Combinational.
module vedic_mult_2x2 (
  input  logic [1:0] a,
  input  logic [1:0] b,
  output logic [3:0] p
);
  logic cross_c;
  always_comb begin
    cross_c = (a[1] & b[0]) & (a[0] & b[1]);
    p[0]    = a[0] & b[0];
    p[1]    = (a[1] & b[0]) ^ (a[0] & b[1]);
    p[2]    = (a[1] & b[1]) ^ cross_c;
    p[3]    = (a[1] & b[1]) & cross_c;
  end
endmodule
