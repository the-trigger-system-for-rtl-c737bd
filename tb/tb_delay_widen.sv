// tb_delay_widen: for several delay/width settings, including the beam-test
// T0 setting (900 ns delay = 36 cycles, 200 ns width = 8 cycles), sends one
// pulse and checks that the output rises exactly delay+1 cycles later and
// stays high exactly `width` cycles; also checks a long input level gives
// one stretched pulse and that two close pulses retrigger the width.
`timescale 1ns/1ps
module tb_delay_widen;
  logic clk = 0, rst = 1, din = 0, dout;
  logic [7:0] delay = '0, width = '0;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  delay_widen #(.MAX_DELAY(256), .DW(8), .WW(8)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic pulse_test(int d, int w, int len);
    int rise, hi;
    // the delay line keeps old edges: clear it before changing the delay
    @(negedge clk); rst = 1; delay = 8'(d); width = 8'(w);
    repeat (2) @(negedge clk); rst = 0;
    din = 1;
    rise = -1; hi = 0;
    for (int c = 1; c < d + w + 20; c++) begin
      @(negedge clk);
      if (c == len) din = 0;
      if (dout) begin hi++; if (rise < 0) rise = c; end
    end
    din = 0;
    if (w > 0) check(rise == d + 1, $sformatf("d=%0d w=%0d rise at %0d", d, w, rise));
    check(hi == w, $sformatf("d=%0d w=%0d high for %0d", d, w, hi));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    pulse_test(36, 8, 1);     // T0 in the beam test
    pulse_test(0, 8, 1);      // TOF: delay unchanged
    pulse_test(0, 1, 1);
    pulse_test(5, 3, 20);     // long input level: one stretched pulse only
    pulse_test(255, 200, 1);
    pulse_test(10, 0, 1);     // width 0 -> nothing
    for (int i = 0; i < 10; i++) pulse_test($urandom_range(0, 100), $urandom_range(1, 60), 1);
    // retrigger: second edge 4 cycles after the first, width 8 -> 12 cycles high
    begin
      int hi;
      @(negedge clk); delay = 8'd2; width = 8'd8;
      hi = 0;
      din = 1; @(negedge clk); din = 0; if (dout) hi++;
      repeat (3) begin @(negedge clk); if (dout) hi++; end
      din = 1; @(negedge clk); din = 0; if (dout) hi++;
      repeat (30) begin @(negedge clk); if (dout) hi++; end
      check(hi == 12, $sformatf("retrigger high %0d", hi));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
