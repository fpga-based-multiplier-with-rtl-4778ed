// Testbench for counter_n3: every input pattern of a 4:3, 5:3, 6:3 and 7:3
// counter, comparing {c2,c1,s} with the number of ones counted bit by bit.
module tb_counter_n3;
  int checks = 0, failures = 0;
  logic [6:0] x;
  logic [2:0] y4, y5, y6, y7;

  counter_n3 #(.N(4)) u4 (.x(x[3:0]), .s(y4[0]), .c1(y4[1]), .c2(y4[2]));
  counter_n3 #(.N(5)) u5 (.x(x[4:0]), .s(y5[0]), .c1(y5[1]), .c2(y5[2]));
  counter_n3 #(.N(6)) u6 (.x(x[5:0]), .s(y6[0]), .c1(y6[1]), .c2(y6[2]));
  counter_n3        u7 (.x(x),      .s(y7[0]), .c1(y7[1]), .c2(y7[2]));

  function automatic int ones(input logic [6:0] v, input int n);
    int c = 0;
    for (int i = 0; i < n; i++) if (v[i]) c++;
    return c;
  endfunction

  task automatic check(input string name, input logic [2:0] got, input int exp);
    checks++;
    if (int'(got) != exp) begin
      failures++;
      $display("FAIL %s x=%b got %0d exp %0d", name, x, got, exp);
    end
  endtask

  initial begin
    for (int v = 0; v < 128; v++) begin
      x = 7'(v);
      #1;
      check("4:3", y4, ones(x, 4));
      check("5:3", y5, ones(x, 5));
      check("6:3", y6, ones(x, 6));
      check("7:3", y7, ones(x, 7));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
