// 3x3 mean filter on a stream of binary pixels, using the approximate multiplier.
//
// Structure (one pixel per clock when pix_valid is high):
//   window_fifo  nine flip-flops U8..U0 hold the last nine pixels, read as the
//                3x3 window W8 W7 W6 / W5 W4 W3 / W2 W1 W0.
//   9 x approx_mult8  each one-bit pixel is copied to all eight bits of the
//                multiplier input (0 -> 0x00, 1 -> 0xFF) and multiplied by the
//                mask weight MASK (1/9 as 0.8 fixed point, 28/256).
//   tap_adder3   Adder 3 sums W8..W6, Adder 2 W5..W3, Adder 1 W2..W0, Adder 0
//                adds the three row sums.
// The adder tree output is registered: out_sum/out_pixel/out_valid change on the
// clock edge after the one that shifted the ninth pixel of a window in, i.e. one
// cycle of latency, and a new result can follow every cycle. out_valid stays low
// until nine pixels have entered after reset and whenever no pixel was shifted in
// the cycle before. out_sum is the weighted sum in 8.8 fixed point (an all-ones
// window gives 9*255*28 = 64260); out_pixel = out_sum[15:8], the 8-bit grey level
// of the denoised pixel, clamped to 255 if out_sum ever exceeds 16 bits.
//
// Following the paper: the nine-stage pixel FIFO, copying each binary pixel eight
// times, nine multipliers against a 1/9 mask, and four adders in two levels.
// This design's choices: the encoding of 1/9, the valid handshake, the output
// register and clamp, the synchronous active-low reset. Like the paper, the window
// is the last nine pixels of the stream; turning a raster image into 3x3 windows
// (line buffers) is not part of the described hardware, so the source must present
// each window's pixels consecutively.
module mean_filter
  import approx_pkg::*;
#(
  parameter operand_t    MASK = MASK_ONE_NINTH,
  parameter int unsigned NAB  = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pix_valid,
  input  logic        pix_in,
  output logic        out_valid,
  output logic [19:0] out_sum,
  output logic [7:0]  out_pixel
);
  localparam int unsigned TAPS = 9;

  // ---------------- pixel window (U8..U0) ----------------
  logic [TAPS-1:0] win;

  window_fifo #(.TAPS(TAPS)) u_fifo (
    .clk   (clk),
    .rst_n (rst_n),
    .shift (pix_valid),
    .pix_in(pix_in),
    .win   (win)
  );

  // ---------------- nine multipliers (W8..W0) ----------------
  product_t w [TAPS];

  for (genvar t = 0; t < TAPS; t++) begin : g_tap
    approx_mult8 #(.NAB(NAB)) u_mult (
      .a({8{win[t]}}),
      .b(MASK),
      .p(w[t])
    );
  end

  // ---------------- adder tree (Adder 3..0) ----------------
  logic [17:0] row_sum [3];
  logic [19:0] total;

  for (genvar r = 0; r < 3; r++) begin : g_row
    tap_adder3 #(.W(16)) u_add (
      .a  (w[3*r+2]),
      .b  (w[3*r+1]),
      .c  (w[3*r]),
      .sum(row_sum[r])
    );
  end

  tap_adder3 #(.W(18)) u_add0 (
    .a  (row_sum[2]),
    .b  (row_sum[1]),
    .c  (row_sum[0]),
    .sum(total)
  );

  // ---------------- fill count and output register ----------------
  logic [3:0] fill;                         // pixels seen since reset, saturates at 9
  logic       prev_shift;                   // a pixel was shifted in at the last edge

  always_ff @(posedge clk) begin
    if (!rst_n) prev_shift <= 1'b0;
    else        prev_shift <= pix_valid;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fill      <= '0;
      out_valid <= 1'b0;
      out_sum   <= '0;
      out_pixel <= '0;
    end else begin
      if (pix_valid && fill != 4'(TAPS)) fill <= fill + 4'd1;
      // the window shifted last cycle is complete once fill has reached TAPS
      out_valid <= (fill == 4'(TAPS)) && prev_shift;
      out_sum   <= total;
      out_pixel <= (total[19:16] != '0) ? 8'hFF : total[15:8];
    end
  end
endmodule
