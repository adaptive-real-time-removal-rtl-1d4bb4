// pixel_labeler: labels one 8-bit pixel and flags noise-free pixels.
//
// Two comparators test the pixel against 0 and against 255 (all bits clear /
// all bits set). Their results form the 2-bit select of a 4-input multiplexer
// whose data inputs are the constants 2 (select 00), 1 (select 01) and
// 0 (select 10); select bit 0 is the "equals 255" result and bit 1 the
// "equals 0" result. Select 11 cannot occur for an 8-bit pixel and yields 2.
// A third comparator checks the label against 2 and produces noise_free.
// This structure is the published one; the label coding is from denoise_pkg.
//
// Interface: pixel in, label and noise_free out. Purely combinational.
module pixel_labeler
  import denoise_pkg::*;
#(
  parameter int unsigned DATA_W = PIX_W
) (
  input  logic [DATA_W-1:0] pixel,
  output label_t            label,
  output logic              noise_free
);

  logic is_zero, is_max;
  logic [1:0] sel;

  assign is_zero = (pixel == '0);
  assign is_max  = (pixel == '1);
  assign sel     = {is_zero, is_max};

  always_comb begin
    unique case (sel)
      2'b00:   label = LBL_OTHER;
      2'b01:   label = LBL_ONE;
      2'b10:   label = LBL_ZERO;
      default: label = LBL_OTHER;
    endcase
  end

  assign noise_free = (label == LBL_OTHER);

endmodule
