// tmr_and_or: bitwise three-input majority voter in AND-OR form,
// y = a&b | a&c | b&c, the TMR plane of the cascaded configuration.
// Interface: a, b, c (W bits) -> y (W bits). Combinational.
// The AND-OR form is the one the source draws for its cascaded TMR planes.
module tmr_and_or #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y
);
  assign y = (a & b) | (a & c) | (b & c);
endmodule
