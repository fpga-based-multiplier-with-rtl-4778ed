// Testbench for approx_rca, exhaustive over all 8-bit operands and both carry
// inputs, three instances:
//   NAB = 8 (default, all cells approximate): each approximate cell passes B on
//           as its carry, so sum[i] = a[i] | (i == 0 ? cin : b[i-1]), cout = b[7].
//   NAB = 1: bit 0 is a | cin, bits 7..1 are the exact sum of a[7:1], b[7:1]
//           and b[0] (the carry handed on by the approximate LSB).
//   NAB = 0: the exact a + b + cin.
module tb_approx_rca;
  int checks = 0, failures = 0;
  logic [7:0] a, b;
  logic       cin;
  logic [7:0] s8, s1, s0;
  logic       c8, c1, c0;

  approx_rca               dut8 (.a(a), .b(b), .cin(cin), .sum(s8), .cout(c8));
  approx_rca #(.NAB(1))    dut1 (.a(a), .b(b), .cin(cin), .sum(s1), .cout(c1));
  approx_rca #(.NAB(0))    dut0 (.a(a), .b(b), .cin(cin), .sum(s0), .cout(c0));

  task automatic check(input string name, input logic [8:0] got, input logic [8:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%0d b=%0d cin=%0d got %0d exp %0d", name, a, b, cin, got, exp);
    end
  endtask

  initial begin
    for (int v = 0; v < 1 << 17; v++) begin
      logic [8:0] e8, e1, e0, hi;
      {cin, a, b} = 17'(v);
      #1;
      e8 = {b[7], a | {b[6:0], cin}};
      hi = 9'(a[7:1]) + 9'(b[7:1]) + 9'(b[0]);
      e1 = {hi[7:0], a[0] | cin};
      e0 = 9'(a) + 9'(b) + 9'(cin);
      check("NAB8", {c8, s8}, e8);
      check("NAB1", {c1, s1}, e1);
      check("NAB0", {c0, s0}, e0);
    end
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
