// tb_pixel_placement: the original pixel is kept when noise-free or
// non-noisy, the restored value is used otherwise.
module tb_pixel_placement;
  logic [7:0] center_pixel, restored, out_pixel;
  logic       non_noisy, noise_free;
  int checks = 0, failures = 0;

  pixel_placement dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expv;
    for (int it = 0; it < 2000; it++) begin
      center_pixel = 8'($urandom);
      restored     = 8'($urandom);
      {non_noisy, noise_free} = 2'(it);
      #1;
      expv = (noise_free || non_noisy) ? int'(center_pixel) : int'(restored);
      checks++;
      if (int'(out_pixel) != expv) begin
        failures++;
        if (failures < 10) $display("nn %0b nf %0b: %0d expected %0d", non_noisy, noise_free, out_pixel, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
