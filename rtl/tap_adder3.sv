// Three-input adder of the mean filter's adder tree (Adder 3 ... Adder 0).
//
// sum = a + b + c with two guard bits, so nothing is lost: W-bit inputs give a
// (W+2)-bit sum. Combinational. The paper uses four such adders (three for the
// rows of the 3x3 window, one to add their results) and gives only their
// function; their width is this design's choice.
module tap_adder3 #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W+1:0] sum
);
  assign sum = (W+2)'(a) + (W+2)'(b) + (W+2)'(c);
endmodule
