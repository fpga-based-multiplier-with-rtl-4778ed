// Image-denoising run of mean_filter at its default parameters.
//
// A 64x64 binary test image (a filled disc and a bar on a black background) is
// corrupted by flipping about 6% of its pixels at random. For every output pixel
// the nine pixels of its 3x3 neighbourhood (zero outside the image) are streamed
// into the filter back to back, bottom-right first and top-left last, so that after
// the ninth shift the top-left pixel sits in U8 (W8) and the bottom-right in U0 (W0);
// the filter result that follows the ninth pixel is that pixel's denoised grey
// level. Each result is compared with the exact 3x3 mean of the noisy window in
// the filter's fixed point (ones * 255 * 28 / 256). The run reports the PSNR
// (peak 255) of the noisy and of the denoised image against the clean one and
// requires the filter to improve it.
module tb_denoise_image;
  localparam int SIZE = 64;
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

  logic clean [SIZE][SIZE];
  logic noisy [SIZE][SIZE];
  logic [7:0] denoised [SIZE][SIZE];

  function automatic logic pix(input int y, input int x);
    if (y < 0 || y >= SIZE || x < 0 || x >= SIZE) return 1'b0;
    return noisy[y][x];
  endfunction

  real se_noisy = 0.0, se_out = 0.0;
  real psnr_noisy, psnr_out;
  int  flips = 0;                           // noise pixels
  int  ones;                                // ones in the current window

  initial begin
    // test image and noise
    for (int y = 0; y < SIZE; y++)
      for (int x = 0; x < SIZE; x++) begin
        clean[y][x] = ((y - 28) * (y - 28) + (x - 24) * (x - 24) < 300) ||
                      (y >= 50 && y < 58 && x >= 8 && x < 56);
        noisy[y][x] = clean[y][x] ^ (($urandom % 100) < 6);
        if (noisy[y][x] != clean[y][x]) flips++;
      end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int y = 0; y < SIZE; y++)
      for (int x = 0; x < SIZE; x++) begin
        ones = 0;
        for (int dy = 1; dy >= -1; dy--)
          for (int dx = 1; dx >= -1; dx--) begin
            pix_valid = 1;
            pix_in    = pix(y + dy, x + dx);
            if (pix_in) ones++;
            @(posedge clk);
            #1;
          end
        pix_valid = 0;
        @(posedge clk);
        #1;
        checks++;
        if (!out_valid || int'(out_pixel) != ones * 255 * 28 / 256) begin
          failures++;
          if (failures < 10) $display("FAIL (%0d,%0d) valid=%0b pixel=%0d exp %0d", y, x,
                                      out_valid, out_pixel, ones * 255 * 28 / 256);
        end
        denoised[y][x] = out_pixel;
        se_noisy += (noisy[y][x] != clean[y][x]) ? 255.0 * 255.0 : 0.0;
        se_out   += (real'(out_pixel) - (clean[y][x] ? 255.0 : 0.0)) ** 2;
      end
    psnr_noisy = 10.0 * $log10(255.0 * 255.0 / (se_noisy / (SIZE * SIZE)));
    psnr_out   = 10.0 * $log10(255.0 * 255.0 / (se_out / (SIZE * SIZE)));
    $display("flipped pixels=%0d  PSNR noisy=%0.2f dB  denoised=%0.2f dB", flips, psnr_noisy, psnr_out);
    checks++;
    if (!(psnr_out > psnr_noisy)) begin
      failures++;
      $display("FAIL filter did not raise the PSNR");
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
