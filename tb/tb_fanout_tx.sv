// tb_fanout_tx: decodes every serial line and transceiver lane with its own
// frame decoder and checks: a trigger gives a single start-bit pulse (payload
// 0) on all lines and a valid word on all lanes, a command gives payload
// {01, code}, a trigger during a command frame is deferred and sent right
// after it, triggers win over a waiting command, and the command is held.
`timescale 1ns/1ps
module tb_fanout_tx;
  import cee_trig_pkg::*;
  localparam int NS = 3, NG = 2;
  logic clk = 0, rst = 1, trig = 0, cmd_valid = 0, cmd_ready, sent_trig, deferred, lost;
  logic [7:0] cmd_code = '0;
  logic [NS-1:0] ser_out;
  logic [NG-1:0][15:0] gtp_word;
  int checks = 0, failures = 0, cyc = 0;
  always #12.5 clk = ~clk;

  fanout_tx #(.N_SER(NS), .N_GTP(NG)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // independent decoder of line 0: records payloads and start cycles
  int bitn = -1; logic [9:0] shreg;
  logic [9:0] frames[$]; int starts[$];
  logic [9:0] words[$];
  always @(posedge clk) if (!rst) begin
    cyc++;
    check(ser_out == {NS{ser_out[0]}}, "all serial lines equal");
    check(gtp_word[0] == gtp_word[NG-1], "all lanes equal");
    if (gtp_word[0][15]) words.push_back(gtp_word[0][9:0]);
    if (bitn < 0) begin
      if (ser_out[0]) begin bitn = 0; starts.push_back(cyc); end
    end else begin
      shreg = {shreg[8:0], ser_out[0]};
      bitn++;
      if (bitn == 10) begin frames.push_back(shreg); bitn = -1; end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    // 1: lone trigger
    @(negedge clk); trig = 1; @(negedge clk); trig = 0;
    repeat (15) @(negedge clk);
    check(frames.size() == 1 && frames[0] == 10'h000, "trigger frame is a single pulse");
    check(words.size() == 1 && words[0] == 10'h000, "trigger word on lanes");
    // 2: command START
    @(negedge clk); cmd_valid = 1; cmd_code = CMD_START;
    check(cmd_ready, "ready when idle");
    @(negedge clk); cmd_valid = 0;
    repeat (15) @(negedge clk);
    check(frames.size() == 2 && frames[1] == {KIND_COMMAND, CMD_START}, "command frame");
    check(words.size() == 2 && words[1] == {KIND_COMMAND, CMD_START}, "command word");
    // 3: trigger during a command frame: deferred, then sent right after
    @(negedge clk); cmd_valid = 1; cmd_code = CMD_TSYNC;
    @(negedge clk); cmd_valid = 0;
    repeat (3) @(negedge clk);
    trig = 1; @(negedge clk); trig = 0;
    check(deferred, "deferred flagged");
    repeat (25) @(negedge clk);
    check(frames.size() == 4 && frames[2] == {KIND_COMMAND, CMD_TSYNC} && frames[3] == 10'h000,
          "command then deferred trigger");
    check(starts.size() == 4 && starts[3] - starts[2] == 11, $sformatf("trigger right after frame (%0d)", starts[3]-starts[2]));
    // 4: trigger and command together: trigger first, command held then sent
    @(negedge clk); trig = 1; cmd_valid = 1; cmd_code = CMD_STOP;
    @(negedge clk); trig = 0;
    check(!cmd_ready, "command waits");
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
    repeat (25) @(negedge clk);
    check(frames.size() == 6 && frames[4] == 10'h000 && frames[5] == {KIND_COMMAND, CMD_STOP}, "trigger has priority");
    check(words.size() == 6, "one word per frame");
    // 5: burst of triggers: second waits, third while one is pending is lost
    @(negedge clk); trig = 1; @(negedge clk); trig = 0;
    @(negedge clk); trig = 1; @(negedge clk); trig = 0;
    @(negedge clk); trig = 1; @(negedge clk); trig = 0;
    check(lost, "third trigger lost");
    repeat (30) @(negedge clk);
    check(frames.size() == 8, $sformatf("two of three burst triggers sent (%0d)", frames.size()));
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
