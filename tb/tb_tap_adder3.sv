// Testbench for tap_adder3: random and extreme operands for the 16-bit adders
// (Adder 3..1) and the 18-bit adder (Adder 0), compared with integer sums.
module tb_tap_adder3;
  int checks = 0, failures = 0;
  logic [15:0] a, b, c;
  logic [17:0] s;
  logic [17:0] a2, b2, c2;
  logic [19:0] s2;

  tap_adder3              dut  (.a(a), .b(b), .c(c), .sum(s));
  tap_adder3 #(.W(18))    dut2 (.a(a2), .b(b2), .c(c2), .sum(s2));

  initial begin
    for (int n = 0; n < 3000; n++) begin
      if (n == 0) begin
        a = '1; b = '1; c = '1; a2 = '1; b2 = '1; c2 = '1;
      end else begin
        a = 16'($urandom); b = 16'($urandom); c = 16'($urandom);
        a2 = 18'($urandom); b2 = 18'($urandom); c2 = 18'($urandom);
      end
      #1;
      checks += 2;
      if (int'(s) != int'(a) + int'(b) + int'(c)) begin
        failures++; $display("FAIL W16 %0d+%0d+%0d got %0d", a, b, c, s);
      end
      if (int'(s2) != int'(a2) + int'(b2) + int'(c2)) begin
        failures++; $display("FAIL W18 %0d+%0d+%0d got %0d", a2, b2, c2, s2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
