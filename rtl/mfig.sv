// mfig: median filter input generator.
//
// Produces the nine inputs of a median filter from the 3x3 block P1..P9. A
// pixel found non-noisy by its similarity unit is passed unchanged. A noisy
// pixel is replaced by 0 or 255, alternating from P1 towards P9: the first
// noisy pixel gets 0 when trigger is 0 and 255 when trigger is 1, the next
// one the other extreme, and so on. Since 0 and 255 sort to the two ends of
// the list, the median of the nine outputs is always taken from the
// non-noisy pixels (unless all nine are noisy). The toggle chain is written
// as a running parity: the extreme used for Pk is trigger XOR (number of
// noisy pixels among P1..Pk-1, modulo 2). This follows the published MFIG.
//
// Interface: trigger, pix[0..8] = P1..P9, non_noisy[0..8]; out[0..8].
// Purely combinational.
module mfig
  import denoise_pkg::*;
#(
  parameter int unsigned DATA_W = PIX_W
) (
  input  logic                          trigger,
  input  logic [NBLK-1:0][DATA_W-1:0]   pix,
  input  logic [NBLK-1:0]               non_noisy,
  output logic [NBLK-1:0][DATA_W-1:0]   out
);

  // toggle: select of the 0/255 multiplexer of the current pixel. It starts at
  // the trigger and flips after every noisy pixel.
  always_comb begin
    logic toggle;
    toggle = trigger;
    for (int k = 0; k < NBLK; k++) begin
      if (non_noisy[k]) out[k] = pix[k];
      else              out[k] = toggle ? '1 : '0;
      toggle = toggle ^ ~non_noisy[k];
    end
  end

endmodule
