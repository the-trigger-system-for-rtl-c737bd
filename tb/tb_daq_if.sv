// tb_daq_if: sends configuration, sync and state-read commands; checks that
// configuration words come out as mode commands, sync codes as FIFO writes,
// and that a state read returns the 80-bit word as five 16-bit words, least
// significant first, starting two cycles after the request.
`timescale 1ns/1ps
module tb_daq_if;
  import cee_trig_pkg::*;
  logic clk = 0, rst = 1, cmd_valid = 0, mode_valid, sync_wr, rsp_valid;
  logic [31:0] cmd = '0, mode_cmd;
  logic [7:0] sync_code;
  logic [79:0] state = 80'h0123_4567_89ab_cdef_5a5a;
  logic [15:0] rsp_data;
  logic [79:0] exp_state;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  daq_if #(.SW(80)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic send(logic [31:0] w);
    @(negedge clk); cmd_valid = 1; cmd = w;
    @(negedge clk); cmd_valid = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    send({DAQ_CFG, REG_M_LOW, 24'd3});
    check(mode_valid && mode_cmd == {DAQ_CFG, REG_M_LOW, 24'd3} && !sync_wr, "config passed as mode command");
    @(negedge clk); check(!mode_valid, "mode_valid one cycle");
    send({DAQ_SYNC, 20'd0, CMD_START});
    check(sync_wr && sync_code == CMD_START && !mode_valid, "sync command written");
    exp_state = state;
    send({DAQ_STATE, 28'd0});
    state = '0;            // the captured copy must not follow the live word
    check(!rsp_valid, "no response in first cycle");
    for (int k = 0; k < 5; k++) begin
      @(negedge clk);
      check(rsp_valid && rsp_data == exp_state[k*16 +: 16], $sformatf("state word %0d = %h", k, rsp_data));
    end
    @(negedge clk);
    check(!rsp_valid, "five words only");
    send({4'hF, 28'd0});
    check(!mode_valid && !sync_wr && !rsp_valid, "unknown class ignored");
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
