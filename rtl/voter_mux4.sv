// voter_mux4: five-module voter with a 4:1 multiplexer.
// Three words are formed from modules a, b, c: their bitwise AND (all three
// agree on 1), their three-input majority (a TMR voter, AND-OR form) and their
// bitwise OR (at least one is 1). Modules d and e drive the multiplexer select,
// per bit:
//   {d,e} = 00 -> AND3(a,b,c)   (d, e are 0: three more ones needed)
//   {d,e} = 01 or 10 -> MAJ3(a,b,c)   (one 1 from d/e: two more needed)
//   {d,e} = 11 -> OR3(a,b,c)    (two ones from d/e: one more needed)
// which is exactly the five-input majority. The gates and the mux input
// assignment (00, 01, 10, 11) follow the source's diagram; the select order is
// immaterial because 01 and 10 carry the same word.
// Interface: a..e (W bits) -> y (W bits). Combinational.
module voter_mux4 #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  input  logic [W-1:0] d,
  input  logic [W-1:0] e,
  output logic [W-1:0] y
);
  logic [W-1:0] all3, maj3, any3;

  assign all3 = a & b & c;
  tmr_and_or #(.W(W)) u_tmr (.a(a), .b(b), .c(c), .y(maj3));
  assign any3 = a | b | c;

  always_comb begin
    for (int i = 0; i < W; i++) begin
      unique case ({d[i], e[i]})
        2'b00:   y[i] = all3[i];
        2'b01:   y[i] = maj3[i];
        2'b10:   y[i] = maj3[i];
        default: y[i] = any3[i];
      endcase
    end
  end
endmodule
