// 8x8 unsigned approximate multiplier built around the approximate full adder.
//
// p ~= a * b, computed in three phases (all combinational, no clock):
//
//  PP phase   64 partial products a[i] & b[j] are sorted into 15 columns
//             k = i + j. Within a column they are ordered by rising i; that order
//             decides which bit feeds A, B and Cin of an approximate cell.
//  PPRT row 1 (first reduction) compresses each column to at most 3 bits:
//             col 1 and 13: half adder; col 2 and 12: approximate full adder;
//             col 3 and 11: 4:3 counter; col 4 and 10: 5:3; col 5 and 9: 6:3;
//             col 6, 7 and 8: 7:3 counter (column 7 has eight bits, its last bit
//             a[7]&b[0] passes to row 2). Columns 0 and 14 pass through.
//  PPRT row 2 col 2..4: half adder; col 7: 4:3 counter (sum, Cout1, Cout2 and the
//             passed bit); cols 5, 6, 8..13: exact full adder. Column 14 passes.
//  PPRT row 3 cols 3..8 and 10..13: half adder; cols 9 and 14 (three bits each):
//             exact full adder. Every column now has at most two bits.
//  Last addition  p[3:0] leave directly; columns 4..15 are added by a 12-bit
//             ripple-carry adder whose NAB lowest cells are approximate full adders
//             (operand A = the row-3 sum bit of the column, operand B = the carry
//             that row 3 sent into it). Its carry out is dropped.
//
// The cell placement follows the paper's dot diagram. Which adders are
// approximate beyond the two named in the text, the bit order inside a column,
// and NAB are this design's choices: the first-row full adders are the approximate
// cell as the text says, the second- and third-row full adders are exact, and the
// final adder has NAB = 1 approximate cell by default.
module approx_mult8
  import approx_pkg::*;
#(
  parameter int unsigned NAB = 1
) (
  input  operand_t a,
  input  operand_t b,
  output product_t p
);
  // ---------------- PP phase ----------------
  // pp[k][n]: n-th partial product of column k, n = i - max(0, k-7)
  logic [7:0] pp [15];

  always_comb begin
    for (int k = 0; k < 15; k++) begin
      pp[k] = '0;
      for (int i = 0; i < 8; i++) begin
        if (k - i >= 0 && k - i < 8) pp[k][i - ((k > 7) ? (k - 7) : 0)] = a[i] & b[k-i];
      end
    end
  end

  // ---------------- PPRT row 1 ----------------
  // s1[k]: sum bit left in column k; c1a[k]: Cout1/carry arriving in column k
  // from column k-1; c1b[k]: Cout2 arriving in column k from column k-2.
  logic [15:0] s1, c1a, c1b;
  logic        pass7;                       // eighth bit of column 7

  assign s1[0]  = pp[0][0];
  assign s1[14] = pp[14][0];
  assign s1[15] = 1'b0;
  assign c1a[1:0] = '0;
  assign c1a[15]  = 1'b0;
  assign c1b[4:0] = '0;
  assign c1b[15:14] = '0;
  assign pass7  = pp[7][7];

  half_adder u_r1_ha1  (.a(pp[1][0]),  .b(pp[1][1]),  .sum(s1[1]),  .cout(c1a[2]));
  approx_fa  u_r1_fa2  (.a(pp[2][0]),  .b(pp[2][1]),  .cin(pp[2][2]),  .sum(s1[2]),  .cout(c1a[3]));
  approx_fa  u_r1_fa12 (.a(pp[12][0]), .b(pp[12][1]), .cin(pp[12][2]), .sum(s1[12]), .cout(c1a[13]));
  half_adder u_r1_ha13 (.a(pp[13][0]), .b(pp[13][1]), .sum(s1[13]), .cout(c1a[14]));

  for (genvar k = 3; k <= 11; k++) begin : g_r1_cnt
    // column height: k+1 below the middle, 15-k above it, at most 7 counted
    localparam int unsigned H = (k <= 7) ? k + 1 : 15 - k;
    localparam int unsigned N = (H > 7) ? 7 : H;
    counter_n3 #(.N(N)) u_cnt (
      .x (pp[k][N-1:0]),
      .s (s1[k]),
      .c1(c1a[k+1]),
      .c2(c1b[k+2])
    );
  end

  // ---------------- PPRT row 2 ----------------
  logic [15:0] s2, c2a;
  logic        c2b9;                        // Cout2 of the row-2 4:3 counter (col 7 -> 9)

  assign s2[0] = s1[0];
  assign s2[1] = s1[1];
  assign s2[15:14] = '0;                   // column 14 is carried in row 2 unchanged
  assign c2a[2:0] = '0;
  assign c2a[15]  = 1'b0;

  for (genvar k = 2; k <= 4; k++) begin : g_r2_ha
    half_adder u_ha (.a(s1[k]), .b(c1a[k]), .sum(s2[k]), .cout(c2a[k+1]));
  end

  for (genvar k = 5; k <= 13; k++) begin : g_r2_fa
    if (k == 7) begin : g_cnt
      counter_n3 #(.N(4)) u_cnt (
        .x ({pass7, c1b[7], c1a[7], s1[7]}),
        .s (s2[7]),
        .c1(c2a[8]),
        .c2(c2b9)
      );
    end else begin : g_fa
      exact_fa u_fa (.a(s1[k]), .b(c1a[k]), .cin(c1b[k]), .sum(s2[k]), .cout(c2a[k+1]));
    end
  end

  // ---------------- PPRT row 3 ----------------
  logic [15:0] s3, c3;

  assign s3[2:0] = s2[2:0];
  assign s3[15]  = 1'b0;
  assign c3[3:0] = '0;

  for (genvar k = 3; k <= 13; k++) begin : g_r3
    if (k == 9) begin : g_fa
      exact_fa u_fa (.a(s2[9]), .b(c2a[9]), .cin(c2b9), .sum(s3[9]), .cout(c3[10]));
    end else begin : g_ha
      half_adder u_ha (.a(s2[k]), .b(c2a[k]), .sum(s3[k]), .cout(c3[k+1]));
    end
  end
  exact_fa u_r3_fa14 (.a(s1[14]), .b(c1a[14]), .cin(c2a[14]),
                      .sum(s3[14]), .cout(c3[15]));

  // ---------------- Last addition ----------------
  logic [11:0] rca_sum;
  logic        rca_cout;                    // beyond 16 bits, dropped

  approx_rca #(.WIDTH(12), .NAB(NAB)) u_rca (
    .a   (s3[15:4]),
    .b   (c3[15:4]),
    .cin (1'b0),
    .sum (rca_sum),
    .cout(rca_cout)
  );

  assign p = {rca_sum, s3[3:0]};

  initial assert (NAB <= 12) else $error("approx_mult8: NAB must be 0..12");
endmodule
