// tb_median9: random and tie-heavy inputs against a sorted reference.
module tb_median9;
  logic [8:0][7:0] in;
  logic [7:0]      median;
  int checks = 0, failures = 0;

  median9 dut (.in(in), .median(median));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int q[$];
    for (int it = 0; it < 20000; it++) begin
      q = {};
      for (int k = 0; k < 9; k++) begin
        in[k] = (it % 2 == 0) ? 8'($urandom) : 8'($urandom_range(3));
        q.push_back(int'(in[k]));
      end
      #1;
      q.sort();
      checks++;
      if (int'(median) != q[4]) begin
        failures++;
        if (failures < 10) $display("in %p: median %0d expected %0d", q, median, q[4]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
