// Pixel window FIFO: a chain of TAPS one-bit flip-flops (U8 ... U0 for TAPS = 9).
//
// On every rising clock edge with shift asserted the incoming binary pixel is
// written into the first stage (index TAPS-1, U8) and every stage hands its bit to
// the next lower one; the bit in U0 falls out. win[TAPS-1:0] shows all stages at
// once, so win holds the last TAPS pixels, newest in win[TAPS-1]. With shift low
// the window holds. Synchronous active-low reset clears every stage.
// The chain of nine flip-flops and the shift direction follow the paper; the
// shift enable and the reset are this design's additions.
module window_fifo #(
  parameter int unsigned TAPS = 9
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            shift,
  input  logic            pix_in,
  output logic [TAPS-1:0] win
);
  always_ff @(posedge clk) begin
    if (!rst_n)     win <= '0;
    else if (shift) win <= {pix_in, win[TAPS-1:1]};
  end
endmodule
