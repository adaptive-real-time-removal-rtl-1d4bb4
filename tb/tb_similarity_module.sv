// tb_similarity_module: random 5x5 label windows against the reference
// decision for each of the nine 3x3 blocks.
module tb_similarity_module;
  import denoise_pkg::*;
  import denoise_ref_pkg::*;

  label_t [4:0][4:0] labels;
  logic   [4:0][4:0] noise_free;
  logic   [3:0]      t1;
  logic   [8:0]      non_noisy;
  logic   [8:0][3:0] similar_count;
  int checks = 0, failures = 0;

  similarity_module dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int l[5][5];
    int n[8];
    int m, base, R, C;
    bit exp_noisy;
    for (int it = 0; it < 5000; it++) begin
      // Mostly one label with islands of others, so both outcomes occur.
      base = $urandom_range(2);
      for (int r = 0; r < 5; r++)
        for (int c = 0; c < 5; c++)
          l[r][c] = ($urandom_range(99) < 35) ? $urandom_range(2) : base;
      for (int r = 0; r < 5; r++)
        for (int c = 0; c < 5; c++) begin
          labels[r][c]     = label_t'(l[r][c]);
          noise_free[r][c] = (l[r][c] == 2);
        end
      t1 = 4'($urandom_range(6));
      #1;
      for (int k = 0; k < 9; k++) begin
        R = 1 + k / 3;
        C = 1 + k % 3;
        m = 0;
        for (int dr = -1; dr <= 1; dr++)
          for (int dc = -1; dc <= 1; dc++)
            if (dr != 0 || dc != 0) begin n[m] = l[R+dr][C+dc]; m++; end
        exp_noisy = ref_noisy(l[R][C], n, int'(t1));
        checks++;
        if (non_noisy[k] != !exp_noisy) begin
          failures++;
          if (failures < 10) $display("it %0d unit %0d: non_noisy %0b", it, k+1, non_noisy[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
