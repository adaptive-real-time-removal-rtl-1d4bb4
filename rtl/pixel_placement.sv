// pixel_placement: selects the pixel written to the de-noised image.
//
// Two multiplexers as in the published design. The inner one selects between
// the original centre pixel and the restored value, controlled by the centre's
// similarity unit (non-noisy keeps the original). The outer one passes the
// original centre pixel whenever the labeler marked it noise-free (label 2),
// otherwise the inner result.
//
// Interface: center_pixel, restored, non_noisy, noise_free; out_pixel.
// Purely combinational.
module pixel_placement
  import denoise_pkg::*;
#(
  parameter int unsigned DATA_W = PIX_W
) (
  input  logic [DATA_W-1:0] center_pixel,
  input  logic [DATA_W-1:0] restored,
  input  logic              non_noisy,
  input  logic              noise_free,
  output logic [DATA_W-1:0] out_pixel
);

  logic [DATA_W-1:0] inner;

  assign inner     = non_noisy  ? center_pixel : restored;
  assign out_pixel = noise_free ? center_pixel : inner;

endmodule
