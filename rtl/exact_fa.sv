// Exact full adder: {cout,sum} = a + b + cin. Combinational.
// Used in the exact positions of the ripple-carry adder and in the second and
// third reduction rows of the multiplier.
module exact_fa (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);
  assign sum  = a ^ b ^ cin;
  assign cout = (a & b) | (cin & (a ^ b));
endmodule
