// tb_stm_l1: STM L1 board logic at its default size (10 inputs, 11 outputs).
// Sends multiplicity frames from several TDM lines, skewed by up to two
// cycles, and checks the uplink word (sum, or 0 below threshold) and its
// latency; sends downlink words and decodes every front-end line; reads the
// state counters. Also runs the uplink-free variant used on tracking boards,
// with its DAQ interface: a word arriving while a frame is on the line is
// dropped and counted, and the 80-bit state word read over the DAQ link
// (input frames, triggers, commands, dropped, sent) is compared with the
// number of words the test sent.
`timescale 1ns/1ps
module tb_stm_l1;
  import cee_trig_pkg::*;
  logic clk = 0, rst = 1;
  logic [15:0] threshold = 16'd3;
  logic [9:0]  fee_in = '0;
  logic [15:0] gtp_tx, gtp_rx = '0, gtp_tx2;
  logic [10:0] fee_out;
  logic [9:0]  fee_out2;
  logic [127:0] state, state2;
  logic        daq_valid = 0, rsp_valid, rsp_valid0;
  logic [31:0] daq_cmd = '0;
  logic [15:0] rsp_data, rsp_data0;
  logic [15:0] rsp[$];
  int checks = 0, failures = 0, cyc = 0;
  always #12.5 clk = ~clk;
  always @(posedge clk) cyc++;

  stm_l1 dut (.clk, .rst, .threshold, .fee_in, .gtp_tx, .gtp_rx, .fee_out, .state,
    .daq_valid(1'b0), .daq_cmd(32'd0), .daq_rsp_valid(rsp_valid0), .daq_rsp(rsp_data0));
  stm_l1 #(.N_IN(1), .N_OUT(10), .HAS_UPLINK(1'b0), .HAS_DAQ(1'b1)) dut_trk (
    .clk, .rst, .threshold, .fee_in(1'b1), .gtp_tx(gtp_tx2), .gtp_rx, .fee_out(fee_out2), .state(state2),
    .daq_valid, .daq_cmd, .daq_rsp_valid(rsp_valid), .daq_rsp(rsp_data));
  always @(posedge clk) if (!rst && rsp_valid) rsp.push_back(rsp_data);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // send frames: line i starts skew[i] cycles late; returns cycle of the last bit
  task automatic send(int m[10], int skew[10], output int last_bit_cyc);
    logic [10:0] f[10];
    for (int i = 0; i < 10; i++) f[i] = {1'b1, 10'(m[i])};
    for (int t = 0; t < 14; t++) begin
      @(negedge clk);
      for (int i = 0; i < 10; i++) begin
        int b;
        b = t - skew[i];
        fee_in[i] = (m[i] >= 0 && b >= 0 && b <= 10) ? f[i][10-b] : 1'b0;
      end
      if (t == 12) last_bit_cyc = cyc;
    end
    @(negedge clk); fee_in = '0;
  endtask

  int m[10], sk[10];
  int lb = 0, exp_sum = 0, seen_cyc = 0, sent_up = 0;
  logic [15:0] seen_word;
  always @(posedge clk) if (!rst && gtp_tx != 0) begin seen_word <= gtp_tx; seen_cyc <= cyc; end
  always @(posedge clk) if (!rst && gtp_tx != 0) sent_up++;

  // downlink decoder on output 0 and 10 and on the tracking board
  int nfr = 0; logic [9:0] last_fr; int bn = -1; logic [9:0] sh;
  always @(posedge clk) if (!rst) begin
    check(fee_out == {11{fee_out[0]}}, "all 11 outputs equal");
    check(fee_out2 == {10{fee_out[0]}}, "tracking board outputs equal");
    if (bn < 0) begin if (fee_out[0]) bn = 0; end
    else begin sh = {sh[8:0], fee_out[0]}; bn++; if (bn == 10) begin nfr++; last_fr = sh; bn = -1; end end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int trial = 0; trial < 30; trial++) begin
      exp_sum = 0;
      for (int i = 0; i < 10; i++) begin
        m[i]  = ($urandom_range(0, 2) == 0) ? int'($urandom_range(0, 4)) : -1;
        sk[i] = $urandom_range(0, 2);
        if (m[i] >= 0) exp_sum += m[i];
      end
      if (trial == 0) begin foreach (m[i]) begin m[i] = -1; sk[i] = 0; end m[3] = 4; m[7] = 2; sk[7] = 2; exp_sum = 6; end
      seen_word = '0; seen_cyc = -1;
      send(m, sk, lb);
      repeat (8) @(negedge clk);
      if (exp_sum >= 3)
        check(seen_word == 16'(exp_sum), $sformatf("trial %0d sum %0d got %0d", trial, exp_sum, seen_word));
      else
        check(seen_cyc < 0, $sformatf("trial %0d below threshold (%0d) suppressed", trial, exp_sum));
      if (trial == 0) check(seen_cyc - lb == 4, $sformatf("uplink latency (window closed by this frame) %0d cycles after last bit", seen_cyc - lb));
    end
    check(gtp_tx2 == 0, "tracking board sends nothing up");
    // downlink: trigger word and command word
    @(negedge clk); gtp_rx = {1'b1, 5'd0, KIND_TRIGGER, 8'h00}; @(negedge clk); gtp_rx = '0;
    repeat (14) @(negedge clk);
    check(nfr == 1 && last_fr == 10'h000, "trigger frame on front-end lines");
    @(negedge clk); gtp_rx = {1'b1, 5'd0, KIND_COMMAND, CMD_START}; @(negedge clk); gtp_rx = '0;
    repeat (14) @(negedge clk);
    check(nfr == 2 && last_fr == {KIND_COMMAND, CMD_START}, "command frame on front-end lines");
    // state counters: [2] words sent up, [4] triggers, [5] commands received
    check(state[2*16 +: 16] == 16'(sent_up), "state: words sent up");
    check(state[4*16 +: 16] == 16'd1 && state[5*16 +: 16] == 16'd1, "state: trigger and command received");
    check(state2[4*16 +: 16] == 16'd1, "tracking board counted the trigger");
    check(rsp_valid0 == 1'b0 && rsp_data0 == 16'd0, "board without DAQ interface stays silent");
    // a second word 3 cycles after the first finds the line busy and is dropped
    @(negedge clk); gtp_rx = {1'b1, 5'd0, KIND_TRIGGER, 8'h00}; @(negedge clk); gtp_rx = '0;
    repeat (2) @(negedge clk);
    gtp_rx = {1'b1, 5'd0, KIND_COMMAND, CMD_STOP}; @(negedge clk); gtp_rx = '0;
    repeat (14) @(negedge clk);
    check(nfr == 3, $sformatf("busy line: only the first of two words sent (%0d frames)", nfr));
    // DAQ read of the tracking board: 5 words, least significant first
    @(negedge clk); daq_valid = 1; daq_cmd = {DAQ_STATE, 28'd0};
    @(negedge clk); daq_valid = 0;
    repeat (10) @(negedge clk);
    check(rsp.size() == 5, $sformatf("DAQ state read returns 5 words (%0d)", rsp.size()));
    if (rsp.size() == 5)
      check(rsp[0] == 0 && rsp[1] == 2 && rsp[2] == 2 && rsp[3] == 1 && rsp[4] == 3,
            $sformatf("DAQ state: frames %0d trig %0d cmd %0d dropped %0d sent %0d",
                      rsp[0], rsp[1], rsp[2], rsp[3], rsp[4]));
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
