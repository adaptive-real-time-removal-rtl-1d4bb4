// tb_block_partitioner: streams two border-extended frames of a small image
// with random idle cycles and checks every 5x5 window, its coordinates, the
// raster order, the number of windows per frame and the one-cycle latency.
module tb_block_partitioner;
  localparam int IMG_W  = 7;
  localparam int IMG_H  = 5;
  localparam int LINE_W = IMG_W + 4;
  localparam int NROW   = IMG_H + 4;

  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid = 0;
  logic [7:0] in_pixel = 0;
  logic win_valid;
  logic [4:0][4:0][7:0] win;
  logic [2:0] cx;
  logic [2:0] cy;
  int checks = 0, failures = 0;
  int bubbles = 0;

  block_partitioner #(.IMG_W(IMG_W), .IMG_H(IMG_H)) dut (.*);

  always #5 clk = ~clk;

  // Value of the extended-frame position (Y, X), unique within a frame.
  function automatic int val(int f, int y, int x);
    return (y * LINE_W + x + f * 101) % 256;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected window sequence, filled by the driver. A pixel driven after edge
  // 'cycle' is taken at edge cycle+1; its window must be seen at edge cycle+2.
  int exp_x[$], exp_y[$], exp_f[$], exp_t[$];
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 2; f++) begin
      for (int y = 0; y < NROW; y++) begin
        for (int x = 0; x < LINE_W; x++) begin
          while ($urandom_range(3) == 0) begin
            in_valid <= 0;
            bubbles++;
            @(posedge clk);
          end
          in_valid <= 1;
          in_pixel <= 8'(val(f, y, x));
          if (y >= 4 && x >= 4) begin
            exp_x.push_back(x - 4); exp_y.push_back(y - 4);
            exp_f.push_back(f);     exp_t.push_back(cycle + 2);
          end
          @(posedge clk);
        end
      end
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    if (exp_x.size() != 0) begin
      failures++;
      $display("%0d windows missing", exp_x.size());
    end
    checks++;
    if (bubbles == 0) begin failures++; $display("no idle cycle driven"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int windows = 0;
  always @(posedge clk) begin
    if (rst_n && win_valid) begin
      int x, y, f, t;
      bit bad;
      windows++;
      checks++;
      if (exp_x.size() == 0) begin
        failures++;
        $display("unexpected window at cycle %0d", cycle);
      end else begin
        x = exp_x.pop_front(); y = exp_y.pop_front();
        f = exp_f.pop_front(); t = exp_t.pop_front();
        bad = (int'(cx) != x) || (int'(cy) != y) || (cycle != t);
        for (int r = 0; r < 5; r++)
          for (int c = 0; c < 5; c++)
            if (int'(win[r][c]) != val(f, y + r, x + c)) bad = 1;
        if (bad) begin
          failures++;
          if (failures < 10)
            $display("window (%0d,%0d) frame %0d at cycle %0d (expected %0d): cx %0d cy %0d centre %0d",
                     x, y, f, cycle, t, cx, cy, win[2][2]);
        end
      end
    end
  end
endmodule
