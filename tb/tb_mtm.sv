// tb_mtm: MTM logic at its default size with the beam-test settings held in
// its reset values (T0 delay 900 ns, widths 200 ns, M_l=3, M_e=10, M_h=100).
// Events are built as a T0 (and AC) transceiver word followed ~800 ns later
// by iTOF/eTOF multiplicity frames, and the testbench checks which event
// types of the trigger table give a global trigger, of which class, that the
// trigger goes out as a single-pulse frame on all STM L2 lines and as a word
// on all single-level lanes, and the run control, cosmic, self-test, divider
// and spill-gate behaviour set through DAQ command words.
`timescale 1ns/1ps
module tb_mtm;
  import cee_trig_pkg::*;
  logic clk = 0, rst = 1, ser_itof = 0, ser_etof = 0, spill = 0;
  logic [15:0] gtp_t0 = '0, gtp_ac = '0;
  logic [3:0] ser_out;
  logic [3:0][15:0] gtp_out;
  logic daq_valid = 0, daq_rsp_valid, gtrg, running;
  logic [31:0] daq_cmd = '0;
  logic [15:0] daq_rsp;
  logic [2:0] gtrg_cls;
  logic [47:0] timestamp;
  int checks = 0, failures = 0, cyc = 0;
  int ntrig = 0, nmb = 0, ncen = 0, nself = 0, ntrig_words = 0, ncmd_words = 0;
  logic [15:0] rsp[$];
  always #12.5 clk = ~clk;

  mtm dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // serial decoder of STM L2 line 0
  int bn = -1; logic [9:0] sh; int nfr_trig = 0, nfr_cmd = 0;
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (gtrg) begin ntrig++; if (gtrg_cls[1]) nmb++; if (gtrg_cls[2]) ncen++; if (gtrg_cls[0]) nself++; end
    check(ser_out == {4{ser_out[0]}}, "all STM L2 lines equal");
    if (gtp_out[0][15]) begin
      check(gtp_out == {4{gtp_out[0]}}, "all lanes equal");
      if (gtp_out[0][9:8] == KIND_TRIGGER) ntrig_words++; else ncmd_words++;
    end
    if (bn < 0) begin if (ser_out[0]) bn = 0; end
    else begin sh = {sh[8:0], ser_out[0]}; bn++;
      if (bn == 10) begin if (sh == 10'h000) nfr_trig++; else nfr_cmd++; bn = -1; end end
    if (daq_rsp_valid) rsp.push_back(daq_rsp);
  end

  task automatic daq(logic [31:0] w);
    @(negedge clk); daq_valid = 1; daq_cmd = w;
    @(negedge clk); daq_valid = 0;
    repeat (20) @(negedge clk);
  endtask

  // one event: T0/AC word at t=0, TOF frames ending at t=33 (825 ns later)
  task automatic event_(bit t0, bit ac, int mi, int me, output int got, output logic [2:0] c);
    logic [10:0] fi, fe;
    int n0;
    n0 = ntrig; c = '0;
    fi = {1'b1, 10'((mi < 0) ? 0 : mi)}; fe = {1'b1, 10'((me < 0) ? 0 : me)};
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      gtp_t0 = (t == 0 && t0) ? 16'd1 : 16'd0;
      gtp_ac = (t == 0 && ac) ? 16'd1 : 16'd0;
      ser_itof = (mi >= 0 && t >= 23 && t <= 33) ? fi[33 - t] : 1'b0;
      ser_etof = (me >= 0 && t >= 23 && t <= 33) ? fe[33 - t] : 1'b0;
      if (gtrg) c = gtrg_cls;
    end
    got = ntrig - n0;
  endtask

  int got = 0, n_tw = 0;
  logic [2:0] c;
  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    check(!running, "not running after reset");
    event_(1, 0, 4, 2, got, c);
    check(got == 0, "no trigger before START");
    daq({DAQ_SYNC, 20'd0, CMD_START});
    check(running, "running after START");
    check(nfr_cmd == 1 && ncmd_words == 1, "START fanned out");
    // trigger table, beam mode
    event_(1, 0, 4, 2, got, c);   check(got == 1 && c == 3'b010, "on target, M=6: minimum bias");
    event_(1, 0, 20, 15, got, c); check(got == 1 && c == 3'b100, "on target, M=35: central");
    event_(1, 1, 20, 15, got, c); check(got == 0, "off-target upstream: AC veto");
    event_(1, 0, -1, 8, got, c);  check(got == 0, "very peripheral: no iTOF");
    event_(1, 0, 90, 60, got, c); check(got == 0, "M=150 above M_h: noise");
    event_(1, 0, 1, 1, got, c);   check(got == 0, "M=2 below M_l: noise");
    event_(0, 0, 20, 15, got, c); check(got == 0, "no T0");
    n_tw = ntrig_words;
    check(nfr_trig == 2 && n_tw == 2, $sformatf("two trigger frames and words (%0d, %0d)", nfr_trig, n_tw));
    // divider on the central class
    daq({DAQ_CFG, REG_DIVIDE, 24'd2});
    for (int k = 0; k < 4; k++) event_(1, 0, 20, 15, got, c);
    check(ncen == 3, $sformatf("central /2: 2 of 4 passed (total %0d)", ncen));
    daq({DAQ_CFG, REG_DIVIDE, 24'd1});
    // cosmic mode: T0 and AC ignored, eTOF alone enough
    daq({DAQ_CFG, REG_MODE, 24'd1});
    event_(0, 1, -1, 12, got, c); check(got == 1, "cosmic: eTOF only, no T0, AC ignored");
    // self-test mode
    daq({DAQ_CFG, REG_PERIOD, 24'd50});
    daq({DAQ_CFG, REG_MODE, 24'd2});
    begin int n0; n0 = nself; repeat (500) @(negedge clk);
      check(nself - n0 >= 9 && nself - n0 <= 11, $sformatf("self-test: %0d triggers in 500 cycles", nself - n0)); end
    daq({DAQ_CFG, REG_MODE, 24'd0});
    // spill gate
    daq({DAQ_CFG, REG_SPILL, 24'd1});
    spill = 0; event_(1, 0, 4, 2, got, c); check(got == 0, "outside spill: blocked");
    spill = 1; event_(1, 0, 4, 2, got, c); check(got == 1, "inside spill: triggers");
    // stop
    daq({DAQ_SYNC, 20'd0, CMD_STOP});
    check(!running, "stopped");
    event_(1, 0, 4, 2, got, c); check(got == 0, "no trigger after STOP");
    // state: [0] GTRG, [1] minimum bias, [2] central
    rsp.delete();
    daq({DAQ_STATE, 28'd0});
    check(rsp.size() == 5, "state read");
    if (rsp.size() == 5)
      check(rsp[0] == 16'(ntrig) && rsp[1] == 16'(nmb) && rsp[2] == 16'(ncen),
            $sformatf("state counters %0d %0d %0d vs %0d %0d %0d", rsp[0], rsp[1], rsp[2], ntrig, nmb, ncen));
    check(nfr_trig == ntrig, "every trigger sent on the serial lines");
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
