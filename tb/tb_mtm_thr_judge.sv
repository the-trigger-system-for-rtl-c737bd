// tb_mtm_thr_judge: sweeps the multiplicity 0..127 with the beam-test
// thresholds (M_l = 3, M_e = 10, M_h = 100) and a second random set, and checks
// the noise / minimum-bias / central class of every value.
`timescale 1ns/1ps
module tb_mtm_thr_judge;
  logic clk = 0, rst = 1, valid = 0, low_thr, high_thr, noise;
  logic [9:0] m_low = 10'd3, m_evt = 10'd10, m_high = 10'd100, mult = '0;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  mtm_thr_judge #(.W(10)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic one(int m);
    bit e_noise, e_low, e_high;
    e_noise = !(m > m_low && m < m_high);
    e_low   = !e_noise && m < m_evt;
    e_high  = !e_noise && m >= m_evt;
    @(negedge clk); mult = 10'(m); valid = 1;
    @(negedge clk); valid = 0;
    check({noise, low_thr, high_thr} == {e_noise, e_low, e_high}, $sformatf("M=%0d", m));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int m = 0; m < 128; m++) one(m);
    m_low = 10'd20; m_evt = 10'd50; m_high = 10'd300;
    for (int i = 0; i < 100; i++) one($urandom_range(0, 400));
    @(negedge clk);
    check(!noise && !low_thr && !high_thr, "no output without valid");
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
