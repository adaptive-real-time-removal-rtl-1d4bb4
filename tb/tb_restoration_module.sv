// tb_restoration_module: random blocks with every number of noisy pixels;
// the output must be the median of the non-noisy pixels.
module tb_restoration_module;
  import denoise_ref_pkg::*;

  logic [8:0][7:0] pix;
  logic [8:0]      non_noisy;
  logic [7:0]      restored, median_lo, median_hi;
  int checks = 0, failures = 0;
  int odd_seen = 0, even_seen = 0, none_seen = 0;

  restoration_module dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v[9];
    bit keep[9];
    int expv, nk;
    for (int it = 0; it < 20000; it++) begin
      nk = 0;
      for (int k = 0; k < 9; k++) begin
        v[k]    = $urandom_range(255);
        keep[k] = ($urandom_range(9) < (it % 10));
        pix[k]  = 8'(v[k]);
        non_noisy[k] = keep[k];
        if (keep[k]) nk++;
      end
      #1;
      expv = ref_median_kept(v, keep);
      if (nk == 0) none_seen++; else if (nk % 2 == 0) even_seen++; else odd_seen++;
      checks++;
      if (int'(restored) != expv) begin
        failures++;
        if (failures < 10) $display("v=%p keep=%p: %0d expected %0d", v, keep, restored, expv);
      end
    end
    if (odd_seen == 0 || even_seen == 0 || none_seen == 0) begin
      failures++;
      $display("case not reached: odd %0d even %0d none %0d", odd_seen, even_seen, none_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
