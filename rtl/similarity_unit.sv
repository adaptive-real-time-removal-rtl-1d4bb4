// similarity_unit: decides whether the centre pixel of a 3x3 label block is
// an impulse (noisy) pixel.
//
// Eight comparators test the neighbour labels L1-L4, L6-L9 against the centre
// label L5; the eight equality bits are added and the sum is compared with the
// threshold. A pixel with label 0 or 1 is noisy when more than t1 of its eight
// neighbours carry a different label, i.e. when similar_count + t1 < 8. A
// label-2 (noise-free) centre is never noisy. Eight bits are added, as in the
// published unit diagram; its text mentions nine, the ninth being the centre
// compared with itself, which is always 1.
//
// Interface: labels and threshold in; non_noisy = 1 means "keep the pixel".
// similar_count is brought out for observation. Purely combinational.
module similarity_unit
  import denoise_pkg::*;
(
  input  label_t       center,
  input  label_t [7:0] neigh,
  input  logic         noise_free,
  input  logic   [3:0] t1,
  output logic         non_noisy,
  output logic   [3:0] similar_count
);

  logic [7:0] same;

  always_comb begin
    for (int i = 0; i < 8; i++) same[i] = (neigh[i] == center);
  end

  // Adder of eight single bits.
  always_comb begin
    similar_count = '0;
    for (int i = 0; i < 8; i++) similar_count = similar_count + 4'(same[i]);
  end

  // Differing neighbours = 8 - similar_count; noisy when that exceeds t1.
  logic [4:0] sum;
  assign sum       = {1'b0, similar_count} + {1'b0, t1};
  assign non_noisy = noise_free || (sum >= 5'd8);

endmodule
