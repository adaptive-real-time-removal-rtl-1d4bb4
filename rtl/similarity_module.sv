// similarity_module: local similarity inspection for the nine pixels of the
// central 3x3 of a 5x5 label window.
//
// The nine overlapping 3x3 blocks of the window, one centred on each pixel
// P1..P9 of the central 3x3 (raster order, P5 = window centre), are fed to nine
// similarity_unit instances. Their results say, for every pixel that may take
// part in restoring the centre, whether it is itself an impulse. Nine units
// follow the published structure; the block extraction is plain wiring.
//
// Interface: labels[r][c] and noise_free[r][c] of the 5x5 window (r = row,
// c = column, [2][2] = centre), threshold t1; non_noisy[k] for Pk+1 and the
// similar counts for observation. Purely combinational.
module similarity_module
  import denoise_pkg::*;
(
  input  label_t [WIN-1:0][WIN-1:0] labels,
  input  logic   [WIN-1:0][WIN-1:0] noise_free,
  input  logic   [3:0]              t1,
  output logic   [NBLK-1:0]         non_noisy,
  output logic   [NBLK-1:0][3:0]    similar_count
);

  for (genvar k = 0; k < NBLK; k++) begin : g_unit
    localparam int R = 1 + k / BLK;   // row of Pk+1 in the 5x5 window
    localparam int C = 1 + k % BLK;   // column of Pk+1

    label_t [7:0] neigh;

    // Neighbours L1-L4, L6-L9 of this block, in raster order.
    always_comb begin
      int n;
      n = 0;
      for (int dr = -1; dr <= 1; dr++) begin
        for (int dc = -1; dc <= 1; dc++) begin
          if (dr != 0 || dc != 0) begin
            neigh[n] = labels[R+dr][C+dc];
            n = n + 1;
          end
        end
      end
    end

    similarity_unit u_siu (
      .center        (labels[R][C]),
      .neigh         (neigh),
      .noise_free    (noise_free[R][C]),
      .t1            (t1),
      .non_noisy     (non_noisy[k]),
      .similar_count (similar_count[k])
    );
  end

endmodule
