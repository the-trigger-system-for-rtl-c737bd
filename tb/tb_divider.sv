// tb_divider: feeds pulse trains with division factors 0, 1, 2, 3, 7 and a
// random one, and checks that exactly the 1st, (N+1)th, ... pulses pass.
`timescale 1ns/1ps
module tb_divider;
  logic clk = 0, rst = 1, din = 0, dout;
  logic [15:0] factor = '0;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  divider #(.W(16)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic train(int f, int n);
    int passed, step;
    step = (f <= 1) ? 1 : f;
    @(negedge clk); rst = 1; factor = 16'(f);
    @(negedge clk); rst = 0;
    passed = 0;
    for (int k = 0; k < n; k++) begin
      din = 1;
      #1 check(dout == (k % step == 0), $sformatf("factor %0d pulse %0d", f, k));
      if (dout) passed++;
      @(negedge clk); din = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    check(passed == (n + step - 1) / step, $sformatf("factor %0d passed %0d of %0d", f, passed, n));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    train(0, 10); train(1, 10); train(2, 20); train(3, 30); train(7, 50);
    train($urandom_range(4, 20), 60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
