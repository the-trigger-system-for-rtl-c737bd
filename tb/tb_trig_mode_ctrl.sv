// tb_trig_mode_ctrl: checks the reset values (beam-test settings), writes
// every register through 32-bit mode commands and reads it back from the
// configuration struct, and checks that words of other classes are ignored.
`timescale 1ns/1ps
module tb_trig_mode_ctrl;
  import cee_trig_pkg::*;
  logic clk = 0, rst = 1, cmd_valid = 0;
  logic [31:0] cmd = '0;
  trig_cfg_t cfg;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  trig_mode_ctrl dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(logic [3:0] cls, logic [3:0] r, logic [23:0] d);
    @(negedge clk); cmd_valid = 1; cmd = {cls, r, d};
    @(negedge clk); cmd_valid = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    check(cfg.mode == MODE_BEAM, "reset mode beam");
    check(cfg.t0_delay == 36 && cfg.t0_width == 8 && cfg.tof_width == 8 && cfg.tof_delay == 0, "reset delays");
    check(cfg.m_low == 3 && cfg.m_evt == 10 && cfg.m_high == 100, "reset thresholds");
    check(cfg.divide == 1, "reset divide");
    wr(DAQ_CFG, REG_MODE, 24'd1);       check(cfg.mode == MODE_COSMIC, "mode cosmic");
    wr(DAQ_CFG, REG_MODE, 24'd2);       check(cfg.mode == MODE_SELFTEST, "mode self-test");
    wr(DAQ_CFG, REG_T0_DLY, 24'd77);    check(cfg.t0_delay == 77, "t0 delay");
    wr(DAQ_CFG, REG_AC_DLY, 24'd12);    check(cfg.ac_delay == 12, "ac delay");
    wr(DAQ_CFG, REG_TOF_DLY, 24'd5);    check(cfg.tof_delay == 5, "tof delay");
    wr(DAQ_CFG, REG_WIDTH, 24'h030201); check(cfg.t0_width == 1 && cfg.ac_width == 2 && cfg.tof_width == 3, "widths");
    wr(DAQ_CFG, REG_GATE, 24'd9);       check(cfg.gate == 9, "gate");
    wr(DAQ_CFG, REG_M_LOW, 24'd21);     check(cfg.m_low == 21, "m_low");
    wr(DAQ_CFG, REG_M_EVT, 24'd55);     check(cfg.m_evt == 55, "m_evt");
    wr(DAQ_CFG, REG_M_HIGH, 24'd999);   check(cfg.m_high == 999, "m_high");
    wr(DAQ_CFG, REG_DIVIDE, 24'd1234);  check(cfg.divide == 1234, "divide");
    wr(DAQ_CFG, REG_PERIOD, 24'h123456); check(cfg.period == 24'h123456, "period");
    wr(DAQ_CFG, REG_SPILL, 24'd1);      check(cfg.spill_gate, "spill gate");
    wr(DAQ_SYNC, REG_T0_DLY, 24'd3);    check(cfg.t0_delay == 77, "other class ignored");
    @(negedge clk); cmd = {DAQ_CFG, REG_T0_DLY, 24'd4};
    @(negedge clk); check(cfg.t0_delay == 77, "no write without valid");
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
