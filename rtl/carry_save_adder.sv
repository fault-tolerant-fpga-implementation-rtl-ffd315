// carry_save_adder: adds three W-bit unsigned numbers, A + B + C, as in the 4-bit
// carry-save adder diagram generalised to W bits.
// A row of W full adders reduces the three operands bit by bit to a sum word S
// and a carry word K without propagating any carry. S[0] is result bit 0; a
// W-bit ripple-carry adder then adds K (weight 2^(i+1)) to S[W-1:1] (with a 0 on
// top), giving result bits W..1 and the carry-out bit W+1.
// Interface: a, b, c (W bits) -> sum (W+2 bits, never overflows). Combinational.
// Used on two's-complement words the low W bits of sum are the modulo-2^W sum.
// Default width 16, the adder width the design names.
module carry_save_adder #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W+1:0] sum
);
  logic [W-1:0] s_row, k_row;

  for (genvar i = 0; i < W; i++) begin : g_csa
    full_adder u_fa (
      .a(a[i]), .b(b[i]), .cin(c[i]), .s(s_row[i]), .cout(k_row[i]));
  end

  logic [W-1:0] rca_sum;
  logic         rca_cout;

  ripple_carry_adder #(.W(W)) u_rca (
    .a   (k_row),
    .b   ({1'b0, s_row[W-1:1]}),
    .cin (1'b0),
    .sum (rca_sum),
    .cout(rca_cout)
  );

  assign sum = {rca_cout, rca_sum, s_row[0]};
endmodule
