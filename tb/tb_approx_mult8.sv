// Testbench for approx_mult8: runs all 65,536 operand pairs through the default
// multiplier (NAB = 1) and an instance with an exact final adder (NAB = 0).
// Checks:
//  - products for which the value of the approximate design was worked out by
//    hand/independent model, including zero and the mean-filter operands;
//  - total error distance sum|p - a*b| and number of erroneous products of the
//    exhaustive sweep against independently computed totals;
//  - that the error never exceeds the weight of the approximated columns
//    (|ED| < 2^14) and that anything times zero is zero.
// It prints MED, MRED and NMED (definitions of the error metrics: mean |ED|, mean
// |ED|/exact, and MED / (2^8-1)^2).
module tb_approx_mult8;
  import approx_pkg::*;
  int checks = 0, failures = 0;
  operand_t a, b;
  product_t p1, p0;

  approx_mult8              dut  (.a(a), .b(b), .p(p1));
  approx_mult8 #(.NAB(0))   dut0 (.a(a), .b(b), .p(p0));

  // expected totals over the exhaustive sweep
  localparam longint SUM_ED_NAB1 = 75581952;
  localparam int     N_ERR_NAB1  = 32048;
  localparam longint SUM_ED_NAB0 = 75559680;
  localparam int     N_ERR_NAB0  = 31680;

  typedef struct packed { logic [7:0] a; logic [7:0] b; logic [15:0] p; } vec_t;
  localparam vec_t VEC [11] = '{
    '{8'd0,   8'd0,   16'd0},     '{8'd255, 8'd0,   16'd0},
    '{8'd255, 8'd28,  16'd7140},  '{8'd28,  8'd255, 16'd7140},
    '{8'd68,  8'd32,  16'd2176},  '{8'd130, 8'd60,  16'd7800},
    '{8'd253, 8'd230, 16'd58190}, '{8'd241, 8'd194, 16'd50850},
    '{8'd107, 8'd48,  16'd5136},  '{8'd199, 8'd221, 16'd48071},
    '{8'd1,   8'd228, 16'd228}};

  longint sum1 = 0, sum0 = 0;               // total error distance
  int     nerr1 = 0, nerr0 = 0;             // erroneous products
  real    mred = 0.0;

  initial begin
    foreach (VEC[i]) begin
      a = VEC[i].a; b = VEC[i].b;
      #1;
      checks++;
      if (p1 !== VEC[i].p) begin
        failures++;
        $display("FAIL %0d x %0d: got %0d exp %0d", a, b, p1, VEC[i].p);
      end
    end
    for (int v = 0; v < 65536; v++) begin
      int exact, e1, e0;
      {a, b} = 16'(v);
      #1;
      exact = int'(a) * int'(b);
      e1 = int'(p1) - exact; if (e1 < 0) e1 = -e1;
      e0 = int'(p0) - exact; if (e0 < 0) e0 = -e0;
      sum1 += e1; sum0 += e0;
      if (e1 != 0) nerr1++;
      if (e0 != 0) nerr0++;
      if (exact != 0) mred += real'(e1) / real'(exact);
      if (e1 >= (1 << 14) || ((a == 0 || b == 0) && p1 != 0)) begin
        checks++; failures++;
        if (failures < 10) $display("FAIL %0d x %0d = %0d out of bounds", a, b, p1);
      end
    end
    checks += 4;
    if (sum1 != SUM_ED_NAB1) begin failures++; $display("FAIL sum ED NAB1 %0d exp %0d", sum1, SUM_ED_NAB1); end
    if (nerr1 != N_ERR_NAB1) begin failures++; $display("FAIL errors NAB1 %0d exp %0d", nerr1, N_ERR_NAB1); end
    if (sum0 != SUM_ED_NAB0) begin failures++; $display("FAIL sum ED NAB0 %0d exp %0d", sum0, SUM_ED_NAB0); end
    if (nerr0 != N_ERR_NAB0) begin failures++; $display("FAIL errors NAB0 %0d exp %0d", nerr0, N_ERR_NAB0); end
    $display("NAB1: MED=%0.3f MRED=%0.5f NMED=%0.5f ER=%0.4f",
             real'(sum1) / 65536.0, mred / 65536.0, real'(sum1) / 65536.0 / 65025.0,
             real'(nerr1) / 65536.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
