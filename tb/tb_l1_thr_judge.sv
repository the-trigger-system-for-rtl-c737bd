// tb_l1_thr_judge: sums below, at and above the threshold; checks the uplink
// word (sum or 0), the pass/reject flags and the one-cycle latency.
`timescale 1ns/1ps
module tb_l1_thr_judge;
  logic clk = 0, rst = 1, in_valid = 0, pass, reject;
  logic [15:0] threshold = 16'd5, in_sum = '0, word;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  l1_thr_judge #(.W(16)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic one(int thr, int s);
    bit ok;
    ok = (s >= thr) && (s != 0);
    @(negedge clk); threshold = 16'(thr); in_sum = 16'(s); in_valid = 1;
    @(negedge clk); in_valid = 0;
    check(word == (ok ? 16'(s) : 16'd0), $sformatf("thr %0d sum %0d word %0d", thr, s, word));
    check(pass == ok && reject == !ok, "flags");
    @(negedge clk);
    check(word == 0 && !pass && !reject, "one cycle only");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    one(5, 4); one(5, 5); one(5, 6); one(1, 0); one(0, 0); one(100, 1000);
    for (int i = 0; i < 50; i++) one($urandom_range(0, 40), $urandom_range(0, 40));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
