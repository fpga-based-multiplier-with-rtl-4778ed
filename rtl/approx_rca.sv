// Ripple-carry adder built from the approximate full adder.
//
// Bit i is an approx_fa cell for i < NAB (the "number of approximate bits",
// counted from the LSB) and an exact full adder above that. NAB = WIDTH makes every
// cell approximate, which is the 8-bit adder drawn next to the cell in the paper;
// NAB = 1 is the configuration used for the paper's PDP/NMED comparison.
// Because an approximate cell forwards B as its carry, the carry chain is cut at
// every approximate position: sum[i] = a[i] | carry_in_i and carry_out_i = b[i].
// Interface: a, b, cin in; sum, cout out. Purely combinational.
module approx_rca #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned NAB   = 8
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);
  logic [WIDTH:0] c;

  assign c[0] = cin;

  for (genvar i = 0; i < WIDTH; i++) begin : g_bit
    if (i < NAB) begin : g_apx
      approx_fa u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(sum[i]), .cout(c[i+1]));
    end else begin : g_exact
      exact_fa  u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(sum[i]), .cout(c[i+1]));
    end
  end

  assign cout = c[WIDTH];

  initial assert (NAB <= WIDTH) else $error("approx_rca: NAB must not exceed WIDTH");
endmodule
