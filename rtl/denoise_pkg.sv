// denoise_pkg: types and constants shared by the impulse-noise removal datapath.
//
// Pixels are 8-bit gray levels. Every pixel gets one of three labels: 0 for a
// black pixel (value 0), 1 for a white pixel (value 255) and 2 for any other
// value. Only label-0 and label-1 pixels can be salt-and-pepper noise. The
// three label values follow the published method; coding them on two bits is
// this design's choice.
package denoise_pkg;

  localparam int unsigned PIX_W = 8;
  typedef logic [PIX_W-1:0] pixel_t;

  typedef enum logic [1:0] {
    LBL_ZERO  = 2'd0,   // pixel == 0
    LBL_ONE   = 2'd1,   // pixel == 255
    LBL_OTHER = 2'd2    // any other value: noise-free
  } label_t;

  // Window geometry: the nine 3x3 blocks around a pixel span a 5x5 window.
  localparam int unsigned WIN   = 5;
  localparam int unsigned BLK   = 3;
  localparam int unsigned NBLK  = BLK * BLK;   // 9 pixels P1..P9 (index 0..8)
  localparam int unsigned CTR   = NBLK / 2;    // index of P5, the centre
  localparam int unsigned BORDER = WIN / 2;    // 2 pixels of border extension

endpackage
