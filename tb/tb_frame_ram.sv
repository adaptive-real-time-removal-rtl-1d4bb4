// tb_frame_ram: random writes and reads against an associative-array model,
// including a read and write of the same address in one cycle (old data).
module tb_frame_ram;
  localparam int DEPTH = 65536;
  logic        clk = 0;
  logic        re, we;
  logic [15:0] raddr, waddr;
  logic [7:0]  rdata, wdata;
  int checks = 0, failures = 0;
  int collisions = 0;

  frame_ram dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned model [int];
    int exp_q;
    bit exp_v;
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    // Fill a small address window first.
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      we = 1; waddr = 16'(a * 1021); wdata = 8'($urandom);
      model[int'(waddr)] = wdata;
    end
    @(negedge clk);
    we = 0;
    exp_v = 0;
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      if (exp_v) begin
        checks++;
        if (int'(rdata) != exp_q) begin
          failures++;
          if (failures < 10) $display("read got %0d expected %0d", rdata, exp_q);
        end
      end
      re    = 1'($urandom_range(1));
      raddr = 16'($urandom_range(63) * 1021);
      we    = 1'($urandom_range(1));
      waddr = (($urandom_range(3) == 0)) ? raddr : 16'($urandom_range(63) * 1021);
      wdata = 8'($urandom);
      exp_v = re;
      if (re) exp_q = model[int'(raddr)];
      if (re && we && raddr == waddr) collisions++;
      if (we) model[int'(waddr)] = wdata;
    end
    if (collisions == 0) begin failures++; $display("no read/write collision"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
