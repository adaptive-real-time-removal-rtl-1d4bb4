// tb_pixel_labeler: exhaustive check of the pixel labeler over all 256 values.
module tb_pixel_labeler;
  import denoise_pkg::*;
  import denoise_ref_pkg::*;

  logic [7:0] pixel;
  label_t     label;
  logic       noise_free;
  int checks = 0, failures = 0;

  pixel_labeler dut (.pixel(pixel), .label(label), .noise_free(noise_free));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 256; p++) begin
      pixel = 8'(p);
      #1;
      checks++;
      if (int'(label) != ref_label(p) || noise_free != (ref_label(p) == 2)) begin
        failures++;
        if (failures < 10) $display("pixel %0d: label %0d noise_free %0b", p, label, noise_free);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
