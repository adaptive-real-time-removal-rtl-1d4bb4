// median9: median of nine values with a network of comparators.
//
// Nineteen compare-exchange cells (the classic median-of-9 selection network)
// leave the fifth smallest of the nine inputs in one position. The published
// design states only that its median filter is a set of comparators; the
// particular network is this design's choice. Ties are harmless: the output is
// the value of the fifth element of the sorted list.
//
// Interface: in[0..8], median. Purely combinational.
module median9
  import denoise_pkg::*;
#(
  parameter int unsigned DATA_W = PIX_W
) (
  input  logic [NBLK-1:0][DATA_W-1:0] in,
  output logic [DATA_W-1:0]           median
);

  // Pairs (a, b): after the cell, v[a] <= v[b].
  localparam int NCELL = 19;
  localparam int CELL_A [NCELL] = '{1, 4, 7, 0, 3, 6, 1, 4, 7, 0, 5, 4, 3, 1, 2, 4, 4, 6, 4};
  localparam int CELL_B [NCELL] = '{2, 5, 8, 1, 4, 7, 2, 5, 8, 3, 8, 7, 6, 4, 5, 7, 2, 4, 2};

  always_comb begin
    logic [DATA_W-1:0] v [NBLK];
    logic [DATA_W-1:0] t;
    t = '0;
    for (int k = 0; k < NBLK; k++) v[k] = in[k];
    for (int c = 0; c < NCELL; c++) begin
      if (v[CELL_A[c]] > v[CELL_B[c]]) begin
        t           = v[CELL_A[c]];
        v[CELL_A[c]] = v[CELL_B[c]];
        v[CELL_B[c]] = t;
      end
    end
    median = v[4];
  end

endmodule
