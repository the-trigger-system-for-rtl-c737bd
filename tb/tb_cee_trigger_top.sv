// tb_cee_trigger_top: end-to-end run of the whole trigger system at its
// default size (2 TOF branches of 10 STM L1 x 10 TDM, 2 tracking branches of
// 10 STM L1, T0/AC/ZDC/pixel boards, MTM). Events are injected as serial
// multiplicity frames on the TDM lines and a hit frame on the T0 (and AC)
// line. Every one of the 460 front-end downlink lines is decoded
// independently; the test checks that each global trigger and each command
// reaches every line exactly once, and that the trigger class and decision
// follow the trigger table and the thresholds. Each mechanism (minimum-bias
// and central classes, AC veto, high and low noise cuts, STM L1 threshold,
// STM L2 uplink loss, divider, cosmic mode, self-test mode, spill gate,
// deferral of a trigger behind a command frame, start/stop/time-sync) is
// counted, and one that never happened counts as a failure. The state word
// of one tracking STM L1 is read over its DAQ link and compared with what its
// front-end lines carried. The latency from TDM frame to GTRG and on to a
// front-end trigger frame is measured once and checked against the 2.6 us round trip quoted for the beam test (which also
// includes fibres and cables that are not modelled here).
`timescale 1ns/1ps
module tb_cee_trigger_top;
  import cee_trig_pkg::*;
  localparam int NT = 10, NK = 10, ND = 10, NF = 10;
  localparam int NLINES = 2*NT*(ND+1) + 2*NK*NF + 4*NF;

  logic clk = 0, rst = 1;
  logic [NT-1:0][ND-1:0] itof_in = '0, etof_in = '0;
  logic t0_in = 0, ac_in = 0, spill = 0;
  logic [15:0] tof_l1_threshold = 16'd1;
  logic [NT-1:0][ND:0] itof_out, etof_out;
  logic [NK-1:0][NF-1:0] tpc_out, mwdc_out;
  logic [NF-1:0] t0_out, ac_out, zdc_out, pix_out;
  logic daq_valid = 0, daq_rsp_valid, gtrg, running;
  logic [31:0] daq_cmd = '0;
  logic [15:0] daq_rsp;
  logic [3:0] l2_daq_valid = '0, l2_daq_rsp_valid;
  logic [3:0][31:0] l2_daq_cmd = '0;
  logic [3:0][15:0] l2_daq_rsp;
  logic [3:0][127:0] l1_state;
  logic [1:0][NK-1:0] trk_daq_valid = '0, trk_daq_rsp_valid;
  logic [1:0][NK-1:0][31:0] trk_daq_cmd = '0;
  logic [1:0][NK-1:0][15:0] trk_daq_rsp;
  logic [15:0] trkrsp[$];
  logic [2:0] gtrg_cls;
  logic [47:0] timestamp;

  int checks = 0, failures = 0, cyc = 0;
  always #12.5 clk = ~clk;

  cee_trigger_top dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // ---- independent decoders on every front-end line --------------------------
  logic [NLINES-1:0] lines;
  assign lines = {itof_out, etof_out, tpc_out, mwdc_out, t0_out, ac_out, zdc_out, pix_out};
  int bn[NLINES]; logic [9:0] shl[NLINES];
  int ln_trig[NLINES], ln_cmd[NLINES];
  int ntrig = 0, nmb = 0, ncen = 0, nself = 0;
  // latency of one event: injection on the TDM lines, GTRG at the MTM, start
  // of the trigger frame on an iTOF front-end line (two-level downlink)
  bit meas = 0; int t_inj = -1, t_gtrg = -1, t_fee = -1;
  logic [15:0] rsp[$], l2rsp[$];
  initial foreach (bn[i]) begin bn[i] = -1; ln_trig[i] = 0; ln_cmd[i] = 0; end

  always @(posedge clk) if (!rst) begin
    cyc++;
    if (gtrg) begin ntrig++; if (gtrg_cls[1]) nmb++; if (gtrg_cls[2]) ncen++; if (gtrg_cls[0]) nself++; end
    for (int i = 0; i < NLINES; i++) begin
      if (bn[i] < 0) begin if (lines[i]) bn[i] = 0; end
      else begin
        shl[i] = {shl[i][8:0], lines[i]}; bn[i]++;
        if (bn[i] == 10) begin
          if (shl[i] == 10'h000) ln_trig[i]++; else ln_cmd[i]++;
          bn[i] = -1;
        end
      end
    end
    if (meas && gtrg && t_gtrg < 0) t_gtrg = cyc;
    if (meas && t_gtrg >= 0 && t_fee < 0 && bn[NLINES-1] == 0) t_fee = cyc;
    if (daq_rsp_valid) rsp.push_back(daq_rsp);
    if (l2_daq_rsp_valid[0]) l2rsp.push_back(l2_daq_rsp[0]);
    if (trk_daq_rsp_valid[1][NK-1]) trkrsp.push_back(trk_daq_rsp[1][NK-1]);
  end

  // ---- stimulus helpers --------------------------------------------------------
  task automatic daq(logic [31:0] w);
    @(negedge clk); daq_valid = 1; daq_cmd = w;
    @(negedge clk); daq_valid = 0;
    repeat (30) @(negedge clk);
  endtask

  // TDM multiplicities mi[board][tdm] (0 = silent), T0 and AC hits; all
  // frames start together; the event is given 120 cycles to finish
  typedef int mult_t[NT][ND];
  task automatic event_(mult_t mi, mult_t me, bit t0, bit ac, output int got, output logic [2:0] c);
    int n0;
    n0 = ntrig; c = '0;
    for (int t = 0; t < 120; t++) begin
      @(negedge clk);
      for (int b = 0; b < NT; b++)
        for (int d = 0; d < ND; d++) begin
          logic [10:0] fi, fe;
          fi = {1'b1, 10'(mi[b][d])}; fe = {1'b1, 10'(me[b][d])};
          itof_in[b][d] = (mi[b][d] > 0 && t <= 10) ? fi[10 - t] : 1'b0;
          etof_in[b][d] = (me[b][d] > 0 && t <= 10) ? fe[10 - t] : 1'b0;
        end
      if (t == 0 && meas) t_inj = cyc;
      t0_in = t0 && (t == 0 || t == 10);   // frame "1", multiplicity 1
      ac_in = ac && (t == 0 || t == 10);
      if (gtrg) c = gtrg_cls;
    end
    got = ntrig - n0;
  endtask

  function automatic mult_t spread(int total, int boards);
    mult_t m;
    foreach (m[b, d]) m[b][d] = 0;
    for (int k = 0; k < total; k++) m[k % boards][(k / boards) % ND] += 1;
    return m;
  endfunction

  int cnt_mb = 0, cnt_cen = 0, cnt_veto = 0, cnt_noise_hi = 0, cnt_noise_lo = 0,
      cnt_l1thr = 0, cnt_l2loss = 0, cnt_div = 0, cnt_cosmic = 0, cnt_self = 0,
      cnt_spill = 0, cnt_defer = 0, cnt_cmd = 0;
  int got = 0;
  logic [2:0] c;
  mult_t zero, a, b;

  initial begin
    foreach (zero[i, j]) zero[i][j] = 0;
    repeat (4) @(negedge clk);
    rst = 0;
    // the direct board-to-board links are much faster than the fibres of the
    // beam test, so T0 and AC need 20 cycles of delay instead of 36 to meet TOF
    daq({DAQ_CFG, REG_T0_DLY, 24'd20});
    daq({DAQ_CFG, REG_AC_DLY, 24'd20});
    daq({DAQ_SYNC, 20'd0, CMD_TSYNC});
    // the time stamp restarted when the command went out (a few cycles
    // after the DAQ write) and then counts one per cycle
    begin logic [47:0] ts0; ts0 = timestamp;
      check(ts0 > 20 && ts0 <= 32, $sformatf("time stamp cleared by TSYNC (%0d)", ts0));
      repeat (100) @(negedge clk);
      check(timestamp == ts0 + 100, "time stamp counts 40 MHz cycles");
    end
    daq({DAQ_SYNC, 20'd0, CMD_START});
    check(running, "running after START");
    // minimum bias: iTOF 3 + eTOF 3 = 6
    meas = 1;
    event_(spread(3, 3), spread(3, 2), 1, 0, got, c);
    meas = 0;
    check(got == 1 && c == 3'b010, "minimum-bias event"); if (got == 1 && c == 3'b010) cnt_mb++;
    $display("latency: TDM frame start -> GTRG %0d cycles, -> front-end trigger frame %0d cycles",
             t_gtrg - t_inj, t_fee - t_inj);
    // the beam test quotes 2.6 us (104 cycles) TDM to TDM including fibres
    check(t_gtrg > t_inj && t_fee > t_gtrg && t_fee - t_inj < 104, "trigger round trip below 2.6 us");
    // central: 25 + 20 = 45, spread over many STM L1 and TDM
    event_(spread(25, 10), spread(20, 7), 1, 0, got, c);
    check(got == 1 && c == 3'b100, "central event"); if (got == 1 && c == 3'b100) cnt_cen++;
    // AC veto
    event_(spread(25, 10), spread(20, 7), 1, 1, got, c);
    check(got == 0, "AC veto"); if (got == 0) cnt_veto++;
    // high noise cut: 80 + 40 = 120 > 100
    event_(spread(80, 10), spread(40, 10), 1, 0, got, c);
    check(got == 0, "high noise cut"); if (got == 0) cnt_noise_hi++;
    // low noise cut: 1 + 1 = 2 < 3 (not above M_l)
    event_(spread(1, 1), spread(1, 1), 1, 0, got, c);
    check(got == 0, "low noise cut"); if (got == 0) cnt_noise_lo++;
    // STM L1 threshold 3: iTOF 10 boards x 1 hit are suppressed, 4 on one board pass
    tof_l1_threshold = 16'd3;
    a = spread(10, 10); a[0][5] += 4;          // board 0 sums 5, boards 1..9 sum 1
    event_(a, spread(3, 1), 1, 0, got, c);   // 5 + 3 = 8; without the cut 13 (central)
    check(got == 1 && c == 3'b010, $sformatf("STM L1 threshold removes single hits (cls %b)", c));
    if (got == 1 && c == 3'b010) cnt_l1thr++;
    tof_l1_threshold = 16'd1;
    // no iTOF at all (very peripheral): no trigger
    event_(zero, spread(6, 3), 1, 0, got, c);
    check(got == 0, "very peripheral (no iTOF)");
    // STM L2 uplink loss: second event 6 cycles after the first on iTOF board 0
    begin
      int lost0;
      rsp.delete(); l2rsp.delete();
      @(negedge clk); l2_daq_valid[0] = 1; l2_daq_cmd[0] = {DAQ_STATE, 28'd0};
      @(negedge clk); l2_daq_valid[0] = 0; repeat (10) @(negedge clk);
      lost0 = (l2rsp.size() == 5) ? int'(l2rsp[2]) : 0;
      for (int t = 0; t < 40; t++) begin
        logic [10:0] f; f = {1'b1, 10'd4};
        @(negedge clk);
        itof_in[0][0] = (t <= 10) ? f[10 - t] : 1'b0;
        itof_in[1][0] = (t >= 6 && t <= 16) ? f[16 - t] : 1'b0;
      end
      repeat (60) @(negedge clk);
      l2rsp.delete();
      @(negedge clk); l2_daq_valid[0] = 1; l2_daq_cmd[0] = {DAQ_STATE, 28'd0};
      @(negedge clk); l2_daq_valid[0] = 0; repeat (10) @(negedge clk);
      check(l2rsp.size() == 5 && int'(l2rsp[2]) == lost0 + 1, "STM L2 counted a lost uplink sum");
      if (l2rsp.size() == 5 && int'(l2rsp[2]) == lost0 + 1) cnt_l2loss++;
    end
    // divider 2 on central events
    daq({DAQ_CFG, REG_DIVIDE, 24'd2});
    begin int n0; n0 = ncen;
      repeat (4) event_(spread(25, 10), spread(20, 7), 1, 0, got, c);
      check(ncen - n0 == 2, $sformatf("divider: %0d of 4 central passed", ncen - n0));
      if (ncen - n0 == 2) cnt_div++; end
    daq({DAQ_CFG, REG_DIVIDE, 24'd1});
    // cosmic mode: eTOF only, no T0
    daq({DAQ_CFG, REG_MODE, 24'd1});
    event_(zero, spread(12, 4), 0, 0, got, c);
    check(got == 1, "cosmic mode, eTOF only"); if (got == 1) cnt_cosmic++;
    // self-test mode, 100-cycle period, plus a command during the run so that
    // a trigger has to wait behind a command frame
    daq({DAQ_CFG, REG_PERIOD, 24'd100});
    daq({DAQ_CFG, REG_MODE, 24'd2});
    begin int n0, d0; n0 = nself;
      repeat (600) @(negedge clk);
      check(nself - n0 >= 5 && nself - n0 <= 7, $sformatf("self-test: %0d triggers", nself - n0));
      if (nself - n0 >= 5) cnt_self++;
      // queue a command to be sent just lost0 a self-test trigger
      rsp.delete(); daq({DAQ_STATE, 28'd0}); d0 = (rsp.size() == 5) ? int'(rsp[4]) : 0;
      while (dut.u_mtm.u_self.cnt != 24'd94) @(negedge clk);
      daq_valid = 1; daq_cmd = {DAQ_SYNC, 20'd0, CMD_TSYNC}; @(negedge clk); daq_valid = 0;
      repeat (40) @(negedge clk);
      rsp.delete(); daq({DAQ_STATE, 28'd0});
      check(rsp.size() == 5 && int'(rsp[4]) > d0, "a trigger was deferred behind a command frame");
      if (rsp.size() == 5 && int'(rsp[4]) > d0) cnt_defer++;
    end
    daq({DAQ_CFG, REG_MODE, 24'd0});
    // spill gate (slow extraction)
    daq({DAQ_CFG, REG_SPILL, 24'd1});
    spill = 0; event_(spread(3, 3), spread(3, 2), 1, 0, got, c); check(got == 0, "outside spill");
    spill = 1; event_(spread(3, 3), spread(3, 2), 1, 0, got, c); check(got == 1, "inside spill");
    if (got == 1) cnt_spill++;
    daq({DAQ_SYNC, 20'd0, CMD_STOP});
    check(!running, "stopped");
    event_(spread(3, 3), spread(3, 2), 1, 0, got, c); check(got == 0, "no trigger after STOP");
    repeat (100) @(negedge clk);
    // every line saw every trigger and command frame
    begin
      bit all_ok; all_ok = 1;
      for (int i = 0; i < NLINES; i++)
        if (ln_trig[i] != ntrig || ln_cmd[i] != 4) begin
          all_ok = 0; $display("line %0d: %0d triggers, %0d commands (exp %0d, 4)", i, ln_trig[i], ln_cmd[i], ntrig);
        end
      check(all_ok, $sformatf("all %0d front-end lines got %0d triggers and 4 commands", NLINES, ntrig));
      if (all_ok) cnt_cmd++;
    end
    // state of the last MWDC STM L1, read over its own DAQ link: triggers,
    // commands and frames sent must match what its front-end lines carried
    // (MWDC board NK-1, line 0 is bit 4*NF + (NK-1)*NF of the line vector)
    begin
      int ln; ln = 4*NF + (NK-1)*NF;
      @(negedge clk); trk_daq_valid[1][NK-1] = 1; trk_daq_cmd[1][NK-1] = {DAQ_STATE, 28'd0};
      @(negedge clk); trk_daq_valid[1][NK-1] = 0;
      repeat (10) @(negedge clk);
      check(trkrsp.size() == 5 && int'(trkrsp[1]) == ln_trig[ln] && int'(trkrsp[2]) == ln_cmd[ln] &&
            trkrsp[3] == 0 && int'(trkrsp[4]) == ln_trig[ln] + ln_cmd[ln],
            $sformatf("tracking STM L1 state over DAQ (%0d words)", trkrsp.size()));
    end
    $display("mechanisms: minbias=%0d central=%0d ac_veto=%0d noise_high=%0d noise_low=%0d l1_threshold=%0d l2_loss=%0d divider=%0d cosmic=%0d selftest=%0d spill=%0d deferred=%0d commands=%0d",
             cnt_mb, cnt_cen, cnt_veto, cnt_noise_hi, cnt_noise_lo, cnt_l1thr, cnt_l2loss, cnt_div,
             cnt_cosmic, cnt_self, cnt_spill, cnt_defer, cnt_cmd);
    mech = '{cnt_mb, cnt_cen, cnt_veto, cnt_noise_hi, cnt_noise_lo, cnt_l1thr, cnt_l2loss,
             cnt_div, cnt_cosmic, cnt_self, cnt_spill, cnt_defer, cnt_cmd};
    foreach (mech[i]) check(mech[i] > 0, $sformatf("mechanism %0d happened", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int mech[13];

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
