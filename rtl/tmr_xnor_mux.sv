// tmr_xnor_mux: bitwise three-input voter in XNOR-MUX form, the dual of
// tmr_xor_mux. An XNOR flags where a and b agree; there the mux passes a, and
// elsewhere the third input c: y = ~(a ^ b) ? a : c per bit. This equals the
// three-input majority.
// Interface: a, b, c (W bits) -> y (W bits). Combinational.
// The source only says its XNOR voter is the XOR one with XNOR in place of XOR;
// passing c on disagreement is this design's completion of that rule.
module tmr_xnor_mux #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y
);
  logic [W-1:0] agree;
  assign agree = ~(a ^ b);
  for (genvar i = 0; i < W; i++) begin : g_bit
    assign y[i] = agree[i] ? a[i] : c[i];
  end
endmodule
