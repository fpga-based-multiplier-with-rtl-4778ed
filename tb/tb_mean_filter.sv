// End-to-end testbench for mean_filter at its default parameters (mask 1/9 as
// 28/256, NAB = 1).
//
// A random binary pixel stream with random idle cycles (pix_valid low) is fed in.
// A model keeps the last nine accepted pixels; since each binary pixel becomes
// 0x00 or 0xFF, every window's exact weighted sum is ones * 255 * 28, and the
// expected out_pixel is that sum divided by 256. One cycle after each accepted
// pixel (from the ninth on) out_valid must be high and the outputs must match;
// in every other cycle out_valid must be low.
// Mechanisms counted, each must occur: window fill after reset (outputs held
// invalid for the first eight pixels), idle cycles holding the window, all-zero
// and all-one windows, and a reset in mid-stream that empties the window again.
module tb_mean_filter;
  int checks = 0, failures = 0;
  logic        clk = 0, rst_n = 0, pix_valid = 0, pix_in = 0;
  logic        out_valid;
  logic [19:0] out_sum;
  logic [7:0]  out_pixel;

  mean_filter dut (
    .clk(clk), .rst_n(rst_n), .pix_valid(pix_valid), .pix_in(pix_in),
    .out_valid(out_valid), .out_sum(out_sum), .out_pixel(out_pixel)
  );

  always #5 clk = ~clk;

  logic [8:0] hist;                         // last nine accepted pixels
  int filled;                               // accepted pixels since reset
  logic exp_valid;
  int exp_sum;
  int n_fill_wait = 0, n_idle = 0, n_zero = 0, n_full = 0, n_reset = 0, n_out = 0;

  task automatic check_out();
    checks++;
    if (out_valid !== exp_valid) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0t out_valid=%0b exp %0b", $time, out_valid, exp_valid);
    end else if (exp_valid) begin
      checks++;
      if (int'(out_sum) != exp_sum || int'(out_pixel) != exp_sum / 256) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0t sum=%0d pixel=%0d exp %0d/%0d", $time,
                                    out_sum, out_pixel, exp_sum, exp_sum / 256);
      end
    end
  endtask

  task automatic do_reset();
    rst_n = 0;
    pix_valid = 0;
    @(posedge clk);
    @(posedge clk);
    #1 rst_n = 1;
    hist = '0; filled = 0; exp_valid = 0;
  endtask

  initial begin
    do_reset();
    for (int n = 0; n < 4000; n++) begin
      if (n == 2000) begin
        do_reset();
        n_reset++;
      end
      // bursts of ones and zeros make all-one and all-zero windows likely
      pix_valid = ($urandom % 5) != 0;
      if (n % 200 < 30)       pix_in = 1;
      else if (n % 200 < 60)  pix_in = 0;
      else                    pix_in = 1'($urandom % 2);
      @(posedge clk);
      #1;
      // outputs now reflect the window as it was before this edge
      check_out();
      if (pix_valid) begin
        int ones;
        hist = {pix_in, hist[8:1]};
        if (filled < 9) filled++;
        ones = $countones(hist);
        exp_valid = (filled == 9);
        exp_sum   = ones * 255 * 28;
        if (filled < 9) n_fill_wait++;
        if (exp_valid && ones == 0) n_zero++;
        if (exp_valid && ones == 9) n_full++;
        if (exp_valid) n_out++;
      end else begin
        exp_valid = 0;
        n_idle++;
      end
    end
    @(posedge clk);
    #1 check_out();
    $display("outputs=%0d fill_wait=%0d idle=%0d all_zero=%0d all_one=%0d resets=%0d",
             n_out, n_fill_wait, n_idle, n_zero, n_full, n_reset);
    checks++;
    if (n_fill_wait == 0 || n_idle == 0 || n_zero == 0 || n_full == 0 || n_reset == 0 || n_out == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
