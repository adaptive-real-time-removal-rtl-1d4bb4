// block_partitioner: turns a raster pixel stream into the 5x5 window around
// each pixel, i.e. the nine overlapping 3x3 blocks centred on the pixel and on
// its eight neighbours.
//
// The input is the image extended by BORDER = 2 pixels on every side, streamed
// row by row: (IMG_H+4) rows of (IMG_W+4) pixels, one pixel per in_valid
// cycle. Four line buffers of IMG_W+4 pixels hold the previous four rows; each
// incoming pixel is stacked with the four pixels above it to form a column of
// five, which is shifted into a 5x5 window register. Once four rows and four
// columns have gone in, the window is centred on an image pixel; win_valid
// marks those cycles and cx, cy give the centre's image coordinates. Windows
// that straddle the left/right edge of the extended frame are not flagged
// valid. Counters wrap after a full frame; clear restarts them.
// That the nine 3x3 blocks are examined together follows the published
// method; line buffers, border extension and the streaming order are this
// design's choices.
//
// Timing: a pixel presented with in_valid in cycle t appears in the window,
// together with win_valid, cx and cy, from cycle t+1.
module block_partitioner
  import denoise_pkg::*;
#(
  parameter int unsigned DATA_W = PIX_W,
  parameter int unsigned IMG_W  = 256,
  parameter int unsigned IMG_H  = 256,
  localparam int unsigned LINE_W = IMG_W + 2*BORDER,
  localparam int unsigned NROW   = IMG_H + 2*BORDER,
  localparam int unsigned XW     = $clog2(LINE_W),
  localparam int unsigned YW     = $clog2(NROW),
  localparam int unsigned CXW    = (IMG_W > 1) ? $clog2(IMG_W) : 1,
  localparam int unsigned CYW    = (IMG_H > 1) ? $clog2(IMG_H) : 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               clear,
  input  logic                               in_valid,
  input  logic [DATA_W-1:0]                  in_pixel,
  output logic                               win_valid,
  output logic [WIN-1:0][WIN-1:0][DATA_W-1:0] win,
  output logic [CXW-1:0]                     cx,
  output logic [CYW-1:0]                     cy
);

  // Line buffers: lb[0] holds the row above the incoming one, lb[3] four rows up.
  logic [DATA_W-1:0] lb [WIN-1][LINE_W];
  logic [XW-1:0]     ex;
  logic [YW-1:0]     ey;
  logic [WIN-1:0][DATA_W-1:0] column;   // column[0] = top (oldest row)

  always_comb begin
    for (int r = 0; r < WIN-1; r++) column[r] = lb[WIN-2-r][ex];
    column[WIN-1] = in_pixel;
  end

  // Line buffer update: each row moves one buffer further up.
  always_ff @(posedge clk) begin
    if (in_valid) begin
      lb[0][ex] <= in_pixel;
      for (int r = 1; r < WIN-1; r++) lb[r][ex] <= lb[r-1][ex];
    end
  end

  // Window shift register: new column enters at c = WIN-1.
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int r = 0; r < WIN; r++) begin
        for (int c = 0; c < WIN-1; c++) win[r][c] <= win[r][c+1];
        win[r][WIN-1] <= column[r];
      end
    end
  end

  // Position counters over the extended frame and window bookkeeping.
  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      ex        <= '0;
      ey        <= '0;
      win_valid <= 1'b0;
      cx        <= '0;
      cy        <= '0;
    end else begin
      win_valid <= in_valid && (ex >= XW'(WIN-1)) && (ey >= YW'(WIN-1));
      if (in_valid) begin
        cx <= CXW'(ex - XW'(WIN-1));
        cy <= CYW'(ey - YW'(WIN-1));
        if (ex == XW'(LINE_W-1)) begin
          ex <= '0;
          ey <= (ey == YW'(NROW-1)) ? '0 : ey + 1'b1;
        end else begin
          ex <= ex + 1'b1;
        end
      end
    end
  end

endmodule
