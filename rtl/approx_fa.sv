// Approximate full adder (the paper's proposed cell).
//
// Sum is a single OR of A and Cin, and Cout is wired straight from B:
//   sum  = a | cin
//   cout = b
// Against an exact full adder the 2-bit result {cout,sum} is wrong in four of the
// eight input combinations, always by an error distance of 1 (three times +1,
// once -1, for a,b,cin = 1,0,1). Purely combinational, no timing of its own.
// Function and gate level follow the paper exactly.
module approx_fa (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);
  assign sum  = a | cin;
  assign cout = b;
endmodule
