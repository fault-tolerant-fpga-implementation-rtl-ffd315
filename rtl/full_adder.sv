// full_adder: one-bit full adder, the cell of the ripple-carry and carry-save
// adders. s = a ^ b ^ cin, cout = majority(a, b, cin). Purely combinational.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic s,
  output logic cout
);
  always_comb begin
    s    = a ^ b ^ cin;
    cout = (a & b) | (a & cin) | (b & cin);
  end
endmodule
