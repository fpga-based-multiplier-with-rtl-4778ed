// Testbench for approx_fa: applies all eight input combinations and compares
// {cout,sum} with the printed truth table of the cell (CS column), and checks the
// error distance against an exact full adder (three +1 and one -1 cases): error
// rate 4/8 and NMED = mean|ED| / 3 (the largest 2-bit result) = 0.5 / 3 = 0.166.
module tb_approx_fa;
  logic a, b, cin, sum, cout;
  int checks = 0, failures = 0;
  int pos = 0, neg = 0;             // cases with error distance +1 / -1
  real nmed;

  approx_fa dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  // expected {C,S} for index {a,b,cin}
  localparam logic [1:0] CS [8] = '{2'b00, 2'b01, 2'b10, 2'b11, 2'b01, 2'b01, 2'b11, 2'b11};

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      checks++;
      if ({cout, sum} !== CS[v]) begin
        failures++;
        $display("FAIL a=%0b b=%0b cin=%0b got CS=%0b%0b exp %02b", a, b, cin, cout, sum, CS[v]);
      end
      if (int'({cout, sum}) - (int'(a) + int'(b) + int'(cin)) == 1)  pos++;
      if (int'({cout, sum}) - (int'(a) + int'(b) + int'(cin)) == -1) neg++;
    end
    checks++;
    if (pos != 3 || neg != 1) begin
      failures++;
      $display("FAIL error distances: +1 x%0d, -1 x%0d", pos, neg);
    end
    checks++;
    nmed = real'(pos + neg) / 8.0 / 3.0;
    $display("ER=%0.3f NMED=%0.4f", real'(pos + neg) / 8.0, nmed);
    if (nmed < 0.166 || nmed > 0.167) begin
      failures++;
      $display("FAIL NMED %0.4f, expected 0.166", nmed);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
