// tb_gtrg_logic: checks the trigger equation against Table 1 of event types
// (T0, iTOF/eTOF class, AC), the AC veto, the divider on the central class,
// cosmic mode (T0 and AC ignored), self-test mode, the enable gate, one
// trigger per coincidence, and the one-cycle latency.
`timescale 1ns/1ps
module tb_gtrg_logic;
  import cee_trig_pkg::*;
  logic clk = 0, rst = 1;
  trig_mode_e mode = MODE_BEAM;
  logic [15:0] divide = 16'd1;
  logic enable = 1, t0 = 0, ac = 0, low_thr = 0, high_thr = 0, selftest = 0;
  logic gtrg, blocked;
  logic [2:0] cls;
  int checks = 0, failures = 0, ntrig = 0;
  always #12.5 clk = ~clk;

  gtrg_logic dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (!rst && gtrg) ntrig++;

  // hold a pattern for 4 cycles, then clear; return triggers seen
  task automatic event_(bit t, bit a, bit lo, bit hi, int exp_n, logic [2:0] exp_cls, string name);
    int n0;
    logic [2:0] seen;
    n0 = ntrig; seen = '0;
    @(negedge clk); t0 = t; ac = a; low_thr = lo; high_thr = hi;
    @(negedge clk);
    if (exp_n > 0) check(gtrg, {name, ": trigger one cycle after coincidence"});
    if (gtrg) seen = cls;
    repeat (3) @(negedge clk);
    t0 = 0; ac = 0; low_thr = 0; high_thr = 0;
    repeat (2) @(negedge clk);
    check(ntrig - n0 == exp_n, $sformatf("%s: %0d triggers, expected %0d", name, ntrig - n0, exp_n));
    if (exp_n > 0) check(seen == exp_cls, $sformatf("%s: class %b", name, seen));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    // Table 1, beam mode
    event_(1, 0, 0, 0, 0, 3'b000, "very peripheral (no iTOF)");
    event_(1, 1, 1, 0, 0, 3'b000, "off-target upstream (AC fires)");
    event_(1, 0, 0, 0, 0, 3'b000, "off-target after TPC");
    event_(1, 0, 1, 0, 1, 3'b010, "on target, minimum bias");
    event_(1, 0, 0, 1, 1, 3'b100, "on target, central");
    event_(0, 0, 1, 0, 0, 3'b000, "no T0");
    event_(1, 1, 0, 1, 0, 3'b000, "central vetoed by AC");
    // divider on the central class
    divide = 16'd3;
    for (int k = 0; k < 6; k++) event_(1, 0, 0, 1, (k % 3 == 0) ? 1 : 0, 3'b100, "central /3");
    event_(1, 0, 1, 0, 1, 3'b010, "minimum bias not divided");
    divide = 16'd1;
    // cosmic mode: T0 and AC ignored
    mode = MODE_COSMIC;
    event_(0, 0, 1, 0, 1, 3'b010, "cosmic, no T0");
    event_(0, 1, 0, 1, 1, 3'b100, "cosmic, AC ignored");
    // enable gate
    mode = MODE_BEAM; enable = 0;
    event_(1, 0, 1, 0, 0, 3'b000, "disabled");
    enable = 1;
    // self-test mode: only the periodic pulse triggers
    mode = MODE_SELFTEST;
    event_(1, 0, 1, 0, 0, 3'b000, "self-test ignores physics");
    @(negedge clk); selftest = 1; @(negedge clk); selftest = 0;
    check(gtrg && cls == 3'b001, "self-test pulse triggers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
