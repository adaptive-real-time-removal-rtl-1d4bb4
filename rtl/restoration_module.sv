// restoration_module: computes the replacement value for a noisy centre pixel.
//
// Two median filter input generators see the same 3x3 block and noise flags,
// one with trigger 0 and one with trigger 1, and each feeds a nine-input
// median filter. With k noisy pixels in the block, k odd, the two generators
// differ by one 0/255 substitute, so their medians are the two middle values
// of the 9-k non-noisy pixels; with k even both medians are the middle value.
// The averaging circuit outputs their mean, rounded half up, (a + b + 1) / 2:
// the median of the non-noisy pixels. If all nine pixels are noisy the
// medians are 0 and 255 and the output is 128. The two-MFIG structure and the
// averaging follow the published design; the rounding mode is this design's.
//
// Interface: pix[0..8] = P1..P9, non_noisy[0..8]; restored. Also the two
// medians for observation. Purely combinational.
module restoration_module
  import denoise_pkg::*;
#(
  parameter int unsigned DATA_W = PIX_W
) (
  input  logic [NBLK-1:0][DATA_W-1:0] pix,
  input  logic [NBLK-1:0]             non_noisy,
  output logic [DATA_W-1:0]           restored,
  output logic [DATA_W-1:0]           median_lo,
  output logic [DATA_W-1:0]           median_hi
);

  logic [NBLK-1:0][DATA_W-1:0] list0, list1;

  mfig #(.DATA_W(DATA_W)) u_mfig0 (.trigger(1'b0), .pix(pix), .non_noisy(non_noisy), .out(list0));
  mfig #(.DATA_W(DATA_W)) u_mfig1 (.trigger(1'b1), .pix(pix), .non_noisy(non_noisy), .out(list1));

  median9 #(.DATA_W(DATA_W)) u_med0 (.in(list0), .median(median_lo));
  median9 #(.DATA_W(DATA_W)) u_med1 (.in(list1), .median(median_hi));

  // Averaging circuit.
  logic [DATA_W:0] sum;
  assign sum      = {1'b0, median_lo} + {1'b0, median_hi} + (DATA_W+1)'(1);
  assign restored = DATA_W'(sum >> 1);

endmodule
