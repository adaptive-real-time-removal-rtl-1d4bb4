// tb_similarity_unit: random label blocks and every threshold 0..8 against the
// reference noisy decision; also checks the similar count.
module tb_similarity_unit;
  import denoise_pkg::*;
  import denoise_ref_pkg::*;

  label_t       center;
  label_t [7:0] neigh;
  logic         noise_free;
  logic   [3:0] t1;
  logic         non_noisy;
  logic   [3:0] similar_count;
  int checks = 0, failures = 0;

  similarity_unit dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n[8];
    int c, same;
    bit exp_noisy;
    for (int it = 0; it < 20000; it++) begin
      c = $urandom_range(2);
      // Bias neighbours towards the centre label to reach all counts.
      for (int i = 0; i < 8; i++) begin
        n[i] = ($urandom_range(3) == 0) ? $urandom_range(2) : c;
        if ($urandom_range(1) == 0) n[i] = $urandom_range(2);
      end
      center = label_t'(c);
      for (int i = 0; i < 8; i++) neigh[i] = label_t'(n[i]);
      noise_free = (c == 2);
      t1 = 4'($urandom_range(8));
      #1;
      same = 0;
      foreach (n[i]) if (n[i] == c) same++;
      exp_noisy = ref_noisy(c, n, int'(t1));
      checks++;
      if (non_noisy != !exp_noisy || int'(similar_count) != same) begin
        failures++;
        if (failures < 10)
          $display("c=%0d n=%p t1=%0d: non_noisy %0b count %0d, expected %0b %0d",
                   c, n, t1, non_noisy, similar_count, !exp_noisy, same);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
