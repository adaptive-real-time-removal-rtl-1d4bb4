// tb_denoise_full: the de-noiser at its default size, 256x256 pixels, on a
// synthetic head-like phantom with salt-and-pepper noise densities of 5, 10,
// 15, 20 and 25 percent.
//
// Every frame is loaded through the host port, processed in place, read back
// and compared pixel by pixel with the reference model; the frame time is
// checked against one pixel per clock over the border-extended frame. The
// PSNR of the noisy and of the restored image against the clean phantom is
// printed for information.
module tb_denoise_full;
  import denoise_ref_pkg::*;

  localparam int W  = 256;
  localparam int H  = 256;
  localparam int T1 = 4;
  localparam int AW = 16;
  localparam int FRAME_CYCLES = (W + 4) * (H + 4) + 6;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic host_we = 0, host_re = 0;
  logic [AW-1:0] host_addr = '0;
  logic [7:0] host_wdata = '0, host_rdata;
  int checks = 0, failures = 0;

  denoise_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int img[], clean[], got[], expv[];
    int cycles, bad;
    ref_stats_t st;
    int densities[5] = '{5, 10, 15, 20, 25};
    repeat (4) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    foreach (densities[d]) begin
      st = '{default: 0};
      make_phantom(W, H, densities[d], 100 + d, img, clean);
      ref_denoise(img, W, H, T1, expv, st);

      foreach (img[i]) begin
        host_we    <= 1;
        host_addr  <= AW'(i);
        host_wdata <= 8'(img[i]);
        @(posedge clk);
      end
      host_we <= 0;
      @(posedge clk);

      start <= 1;
      @(posedge clk);
      start <= 0;
      cycles = 0;
      do begin
        @(posedge clk);
        cycles++;
      end while (!done && cycles < 2 * FRAME_CYCLES);
      checks++;
      if (cycles != FRAME_CYCLES) begin
        failures++;
        $display("frame took %0d cycles, expected %0d", cycles, FRAME_CYCLES);
      end
      @(posedge clk);

      got = new[W*H];
      for (int i = 0; i < W*H; i++) begin
        host_re   <= 1;
        host_addr <= AW'(i);
        @(posedge clk);
        #1;
        got[i] = int'(host_rdata);
      end
      host_re <= 0;

      bad = 0;
      foreach (got[i]) begin
        checks++;
        if (got[i] != expv[i]) begin
          bad++;
          if (bad < 6) $display("pixel (%0d,%0d) = %0d, expected %0d", i / W, i % W, got[i], expv[i]);
        end
      end
      failures += bad;
      $display("density %0d%%: %0d cycles, PSNR noisy %0.2f dB, restored %0.2f dB; noise_free %0d kept_0_255 %0d restored %0d (odd %0d even %0d none %0d border %0d)",
               densities[d], cycles, psnr(img, clean), psnr(got, clean),
               st.noise_free, st.extreme_kept,
               st.restored_odd + st.restored_even + st.restored_none,
               st.restored_odd, st.restored_even, st.restored_none, st.restored_border);
      checks++;
      if (st.restored_odd == 0 || st.restored_even == 0 || st.extreme_kept == 0) begin
        failures++;
        $display("a mechanism was never exercised");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
