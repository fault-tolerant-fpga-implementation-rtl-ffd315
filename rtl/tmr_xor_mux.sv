// tmr_xor_mux: bitwise three-input voter in XOR-MUX form. An XOR compares a and
// b; where they agree the mux passes a (the majority), where they differ it
// passes the third input c, which then decides: y = (a ^ b) ? c : a per bit.
// This equals the three-input majority.
// Interface: a, b, c (W bits) -> y (W bits). Combinational.
// The pass-a-or-the-third-input rule is the one the source states for its
// XOR-MUX voter; the per-bit form is this design's reading of it.
module tmr_xor_mux #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y
);
  logic [W-1:0] sel;
  assign sel = a ^ b;
  for (genvar i = 0; i < W; i++) begin : g_bit
    assign y[i] = sel[i] ? c[i] : a[i];
  end
endmodule
