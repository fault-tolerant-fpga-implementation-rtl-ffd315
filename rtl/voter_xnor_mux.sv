// voter_xnor_mux: five-module voter built as a cascade of three-input (XNOR-MUX)
// voters, tmr_xnor_mux.
//
// Four three-input voters in three levels give exactly the five-input majority:
//   t1 = V(a, b, c)      t2 = V(a, b, d)      (first plane)
//   t3 = V(c, d, t1)                          (second plane)
//   y  = V(e, t2, t3)                         (third plane)
// Each plane's output feeds the next, so the five outputs are voted through TMR
// subsystems, and any two faulty modules are outvoted bit by bit.
// The source names the configuration and the voter gates; the wiring of its
// diagram cannot be read in full, and a final mux whose data inputs are only two
// of the modules (as that diagram suggests) could not outvote two equal faults,
// so this network - found by exhaustive search over four-voter cascades - is
// this design's choice. The three cascaded configurations share it and differ
// only in the three-input voter circuit.
// Interface: a..e (W bits, one per filter module) -> y (W bits). Combinational.
module voter_xnor_mux #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  input  logic [W-1:0] d,
  input  logic [W-1:0] e,
  output logic [W-1:0] y
);
  logic [W-1:0] t1, t2, t3;

  tmr_xnor_mux #(.W(W)) u_v1 (.a(a), .b(b), .c(c),  .y(t1));
  tmr_xnor_mux #(.W(W)) u_v2 (.a(a), .b(b), .c(d),  .y(t2));
  tmr_xnor_mux #(.W(W)) u_v3 (.a(c), .b(d), .c(t1), .y(t3));
  tmr_xnor_mux #(.W(W)) u_v4 (.a(e), .b(t2), .c(t3), .y(y));
endmodule
