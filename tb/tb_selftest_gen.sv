// tb_selftest_gen: checks the pulse spacing for several periods, that the
// first pulse comes `period` cycles after enable, that disable stops it and
// that a period of 0 gives no pulses.
`timescale 1ns/1ps
module tb_selftest_gen;
  logic clk = 0, rst = 1, enable = 0, pulse;
  logic [23:0] period = '0;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  selftest_gen #(.W(24)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run(int p, int cycles);
    int last, n, c;
    @(negedge clk); enable = 0; period = 24'(p);
    @(negedge clk); enable = 1;
    last = 0; n = 0;
    for (c = 1; c <= cycles; c++) begin
      @(negedge clk);
      if (pulse) begin
        check(c - last == p, $sformatf("period %0d spacing %0d", p, c - last));
        last = c; n++;
      end
    end
    check(n == ((p == 0) ? 0 : cycles / p), $sformatf("period %0d count %0d", p, n));
    enable = 0;
    repeat (p + 3) begin @(negedge clk); check(!pulse, "off when disabled"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    run(1, 20); run(2, 40); run(5, 100); run(40, 400); run(0, 50);
    run($urandom_range(3, 30), 300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
