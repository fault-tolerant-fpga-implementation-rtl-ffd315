// voter_conventional: the majority voter of the conventional 5MR configuration.
// Each output bit is 1 when at least three of the five module outputs have that
// bit set, written as the sum of all ten three-input products:
//   abc+abd+abe+acd+ace+ade+bcd+bce+bde+cde.
// (The source diagram prints "bde" twice and omits "bce"; the ten distinct terms
// are used here.) Any two faulty modules are outvoted, bit by bit.
// Interface: a..e (W bits, one per filter module) -> y (W bits). Combinational.
module voter_conventional #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  input  logic [W-1:0] d,
  input  logic [W-1:0] e,
  output logic [W-1:0] y
);
  assign y = (a & b & c) | (a & b & d) | (a & b & e) | (a & c & d) | (a & c & e)
           | (a & d & e) | (b & c & d) | (b & c & e) | (b & d & e) | (c & d & e);
endmodule
