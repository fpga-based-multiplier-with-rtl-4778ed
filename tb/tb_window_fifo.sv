// Testbench for window_fifo: after reset the window must be all zero; then a
// random bit stream with random shift enables is applied and the nine taps are
// compared every cycle with a model that keeps the last nine accepted pixels.
module tb_window_fifo;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, shift = 0, pix_in = 0;
  logic [8:0] win, model;
  int shifts = 0, holds = 0;

  window_fifo dut (.clk(clk), .rst_n(rst_n), .shift(shift), .pix_in(pix_in), .win(win));

  always #5 clk = ~clk;

  initial begin
    model = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (win !== '0) begin failures++; $display("FAIL window not cleared by reset"); end
    for (int n = 0; n < 2000; n++) begin
      shift  = ($urandom % 4) != 0;
      pix_in = 1'($urandom % 2);
      @(posedge clk);
      if (shift) begin model = {pix_in, model[8:1]}; shifts++; end
      else holds++;
      #1;
      checks++;
      if (win !== model) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d win=%b exp %b", n, win, model);
      end
    end
    checks++;
    if (shifts == 0 || holds == 0) begin failures++; $display("FAIL no shift or no hold seen"); end
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
