// tb_denoise_top: end-to-end test of the de-noiser on a small 18x12 image (a width
// that is not a power of two).
//
// Each frame is loaded through the host port, processed, read back and
// compared pixel by pixel with the reference model. The frames are chosen so
// that every mechanism occurs: noise-free pass-through, 0/255 pixels kept
// because they resemble their neighbours, restoration from an odd and from an
// even number of non-noisy pixels (averaging of the two medians), blocks with
// no non-noisy pixel, restoration on the image border, a host read-back and a
// second pass over an image already in memory. The frame time is checked
// against (W+4)*(H+4) read cycles plus the pipeline latency.
module tb_denoise_top;
  import denoise_ref_pkg::*;

  localparam int W  = 18;
  localparam int H  = 12;
  localparam int T1 = 4;
  localparam int AW = $clog2(W*H);
  localparam int FRAME_CYCLES = (W + 4) * (H + 4) + 6;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic host_we = 0, host_re = 0;
  logic [AW-1:0] host_addr = '0;
  logic [7:0] host_wdata = '0, host_rdata;
  int checks = 0, failures = 0;

  denoise_top #(.IMG_W(W), .IMG_H(H), .T1(T1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ref_stats_t st;
  int frames = 0, second_pass = 0;

  task automatic load(const ref int img[]);
    foreach (img[i]) begin
      host_we    <= 1;
      host_addr  <= AW'(i);
      host_wdata <= 8'(img[i]);
      @(posedge clk);
    end
    host_we <= 0;
    @(posedge clk);
  endtask

  task automatic process();
    int cycles;
    start <= 1;
    @(posedge clk);
    start <= 0;
    cycles = 0;
    do begin
      @(posedge clk);
      cycles++;
    end while (!done && cycles < 10 * FRAME_CYCLES);
    checks++;
    if (cycles != FRAME_CYCLES) begin
      failures++;
      $display("frame took %0d cycles, expected %0d", cycles, FRAME_CYCLES);
    end
    @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("busy after done"); end
    frames++;
  endtask

  task automatic read_back(ref int got[]);
    got = new[W*H];
    // The address is taken at the edge; host_rdata holds the pixel just after it.
    for (int i = 0; i < W*H; i++) begin
      host_re   <= 1;
      host_addr <= AW'(i);
      @(posedge clk);
      #1;
      got[i] = int'(host_rdata);
    end
    host_re <= 0;
  endtask

  task automatic compare(const ref int got[], const ref int expv[], input string name);
    int bad = 0;
    foreach (got[i]) begin
      checks++;
      if (got[i] != expv[i]) begin
        bad++;
        if (bad < 6) $display("%s: pixel (%0d,%0d) = %0d, expected %0d",
                              name, i / W, i % W, got[i], expv[i]);
      end
    end
    failures += bad;
  endtask

  task automatic run(const ref int img[], ref int got[], input string name);
    int expv[];
    ref_denoise(img, W, H, T1, expv, st);
    load(img);
    process();
    read_back(got);
    compare(got, expv, name);
  endtask

  initial begin
    int img[], clean[], got[], again[], expv[];
    repeat (4) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    make_phantom(W, H, 20, 11, img, clean);
    run(img, got, "phantom 20%");

    make_phantom(W, H, 10, 12, img, clean);
    run(img, got, "phantom 10%");

    make_phantom(W, H, 70, 13, img, clean);
    run(img, got, "phantom 70%");

    // Second pass on the result still in memory, without reloading.
    ref_denoise(got, W, H, T1, expv, st);
    process();
    read_back(again);
    compare(again, expv, "second pass");
    second_pass++;

    // Alternating black and white columns: every pixel of a 3x3 block is an
    // impulse, so the block has no non-noisy pixel.
    img = new[W*H];
    foreach (img[i]) img[i] = ((i % W) % 2 == 0) ? 0 : 255;
    for (int i = 0; i < W*H; i += 7) img[i] = 90 + i % 50;
    run(img, got, "stripes");

    // Random 0/255/other mixture with large black and white areas.
    img = new[W*H];
    foreach (img[i]) begin
      int r = $urandom_range(9);
      img[i] = (r < 3) ? 0 : (r < 6) ? 255 : $urandom_range(1, 254);
      if ((i % W) < 4) img[i] = ($urandom_range(9) == 0) ? 255 : 0;
    end
    run(img, got, "mixture");

    $display("mechanisms: noise_free %0d extreme_kept %0d restored_odd %0d restored_even %0d restored_none %0d restored_border %0d frames %0d second_pass %0d",
             st.noise_free, st.extreme_kept, st.restored_odd, st.restored_even,
             st.restored_none, st.restored_border, frames, second_pass);
    checks++;
    if (st.noise_free == 0 || st.extreme_kept == 0 || st.restored_odd == 0 ||
        st.restored_even == 0 || st.restored_none == 0 || st.restored_border == 0 ||
        second_pass == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
