// tb_global_sync: feeds commands through a FIFO model, holds off cmd_ready,
// and checks that each command is offered in order and held until taken,
// that START/STOP set and clear `running`, that TSYNC clears the time stamp
// and that unknown codes are dropped.
`timescale 1ns/1ps
module tb_global_sync;
  import cee_trig_pkg::*;
  logic clk = 0, rst = 1, fifo_empty, fifo_rd, cmd_ready = 1, cmd_valid, running;
  logic [7:0] fifo_data, cmd_code;
  logic [47:0] timestamp;
  logic [7:0] q[$];
  logic [7:0] taken[$];
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  assign fifo_empty = (q.size() == 0);
  assign fifo_data  = (q.size() > 0) ? q[0] : 8'h00;
  always @(posedge clk) if (!rst) begin
    if (fifo_rd) void'(q.pop_front());
    if (cmd_valid && cmd_ready) taken.push_back(cmd_code);
  end

  global_sync dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    check(!running, "not running after reset");
    q.push_back(CMD_START);
    repeat (4) @(negedge clk);
    check(running, "running after START");
    check(taken.size() == 1 && taken[0] == CMD_START, "START sent");
    // hold-off: command stays offered
    cmd_ready = 0;
    q.push_back(CMD_STOP);
    repeat (5) @(negedge clk);
    check(cmd_valid && cmd_code == CMD_STOP, "STOP held while not ready");
    check(running, "still running before STOP is taken");
    cmd_ready = 1;
    repeat (2) @(negedge clk);
    check(!running, "stopped after STOP");
    // time sync
    repeat (50) @(negedge clk);
    check(timestamp > 50, "time stamp counts");
    q.push_back(8'h7e);          // unknown, dropped
    q.push_back(CMD_TSYNC);
    repeat (4) @(negedge clk);
    check(timestamp < 5, $sformatf("time stamp cleared (%0d)", timestamp));
    check(taken.size() == 3 && taken[2] == CMD_TSYNC, "unknown dropped, TSYNC sent");
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
