// tb_mfig: random blocks and noise masks; noisy pixels must be replaced by
// 0 and 255 alternately in the order P1..P9, the first one given by trigger.
module tb_mfig;
  logic            trigger;
  logic [8:0][7:0] pix;
  logic [8:0]      non_noisy;
  logic [8:0][7:0] out;
  int checks = 0, failures = 0;

  mfig dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nth, expv;
    for (int it = 0; it < 5000; it++) begin
      trigger   = 1'($urandom_range(1));
      non_noisy = 9'($urandom);
      for (int k = 0; k < 9; k++) pix[k] = 8'($urandom);
      #1;
      nth = 0;   // number of noisy pixels seen so far
      for (int k = 0; k < 9; k++) begin
        if (non_noisy[k]) expv = pix[k];
        else begin
          // even-numbered substitutes (0, 2, ...) take the trigger's extreme
          expv = (((nth % 2) == 0) == (trigger == 1'b0)) ? 0 : 255;
          nth++;
        end
        checks++;
        if (int'(out[k]) != expv) begin
          failures++;
          if (failures < 10) $display("it %0d P%0d: %0d expected %0d", it, k+1, out[k], expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
