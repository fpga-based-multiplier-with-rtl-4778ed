// n:3 counter (N = 4..7): counts the ones among N bits of one partial-product
// column and returns the count as three bits of rising weight:
//   {c2, c1, s} = popcount(x)
// s stays in the column, c1 (Cout1) goes one column left, c2 (Cout2) two
// columns left. The multiplier uses 4:3, 5:3, 6:3 and 7:3 counters in its first
// reduction row. The paper takes these counters from earlier work and gives only
// their function, so this is a plain exact population count. Combinational.
module counter_n3 #(
  parameter int unsigned N = 7
) (
  input  logic [N-1:0] x,
  output logic         s,
  output logic         c1,
  output logic         c2
);
  logic [2:0] count;

  always_comb begin
    count = '0;
    for (int unsigned i = 0; i < N; i++) count = count + 3'(x[i]);
  end

  assign s  = count[0];
  assign c1 = count[1];
  assign c2 = count[2];

  initial assert (N >= 2 && N <= 7) else $error("counter_n3: N must be 2..7");
endmodule
