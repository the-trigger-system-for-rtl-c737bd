// tb_beam_test: the trigger system in the prototype beam-test configuration
// (one STM L1 and one STM L2 per TOF branch, one STM L1 per tracking branch),
// running a random stream of events of the four kinds of the trigger firing
// table:
//   on target             T0, iTOF, eTOF fire, AC silent  -> trigger by class
//   very peripheral       T0, eTOF fire                    -> no trigger
//   off target upstream   T0, iTOF, eTOF and AC fire       -> vetoed
//   off target after TPC  T0, eTOF fire                    -> no trigger
// The multiplicities are random; each hit is put on a random TDM line, and
// each TDM frame may start up to two cycles late. The trigger registers keep
// their beam-test reset values (M_l = 3, M_e = 10, M_h = 100, division 1,
// widths 200 ns); only the T0/AC delay is set to 20 cycles because the links
// between the boards have no fibre delay here. A reference model predicts
// for each event whether a GTRG must appear and with which class; at the end
// the MTM state counters read over the DAQ link must agree with the model,
// and the trigger frames decoded on one TPC and one T0 front-end line must
// equal the number of GTRG. Events follow each other every 120-320 cycles,
// a much higher rate than the 1-4 kHz of the beam test, which only makes the
// test harder (the design keeps no state between events beyond the frame).
`timescale 1ns/1ps
module tb_beam_test;
  import cee_trig_pkg::*;
  localparam int NT = 1, NK = 1, ND = 10, NF = 10, NEV = 300;

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
  logic [2:0] gtrg_cls;
  logic [47:0] timestamp;

  int checks = 0, failures = 0, cyc = 0;
  always #12.5 clk = ~clk;

  cee_trigger_top #(.N_TOF_L1(NT), .N_TRK_L1(NK), .N_TDM(ND), .N_FEMM(NF)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // GTRG monitor and trigger-frame decoders on a TPC and a T0 front-end line
  int ntrig = 0, nmb = 0, ncen = 0;
  int bn[2] = '{-1, -1}, ntf[2] = '{0, 0};
  logic [9:0] sh[2];
  logic [1:0] ln;
  logic [15:0] rsp[$];
  assign ln = {tpc_out[0][NF-1], t0_out[0]};
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (gtrg) begin ntrig++; if (gtrg_cls[1]) nmb++; if (gtrg_cls[2]) ncen++; end
    for (int i = 0; i < 2; i++)
      if (bn[i] < 0) begin if (ln[i]) bn[i] = 0; end
      else begin
        sh[i] = {sh[i][8:0], ln[i]}; bn[i]++;
        if (bn[i] == 10) begin if (sh[i] == 10'h000) ntf[i]++; bn[i] = -1; end
      end
    if (daq_rsp_valid) rsp.push_back(daq_rsp);
  end

  task automatic daq(logic [31:0] w);
    @(negedge clk); daq_valid = 1; daq_cmd = w;
    @(negedge clk); daq_valid = 0;
    repeat (30) @(negedge clk);
  endtask

  // one event: per-TDM multiplicities and start skews, T0/AC hits; returns
  // the number of GTRG and the last class seen within `len` cycles
  typedef int tdm_t[ND];
  task automatic event_(tdm_t mi, tdm_t me, tdm_t si, tdm_t se, bit t0, bit ac, int len,
                        output int got, output logic [2:0] c);
    int n0, bi, be;
    n0 = ntrig; c = '0;
    for (int t = 0; t < len; t++) begin
      @(negedge clk);
      for (int d = 0; d < ND; d++) begin
        logic [10:0] fi, fe;
        fi = {1'b1, 10'(mi[d])}; fe = {1'b1, 10'(me[d])};
        bi = t - si[d]; be = t - se[d];
        itof_in[0][d] = (mi[d] > 0 && bi >= 0 && bi <= 10) ? fi[10 - bi] : 1'b0;
        etof_in[0][d] = (me[d] > 0 && be >= 0 && be <= 10) ? fe[10 - be] : 1'b0;
      end
      t0_in = t0 && (t == 0 || t == 10);
      ac_in = ac && (t == 0 || t == 10);
      if (gtrg) c = gtrg_cls;
    end
    got = ntrig - n0;
  endtask

  // hits spread over random TDM lines
  function automatic tdm_t scatter(int total);
    tdm_t m;
    foreach (m[d]) m[d] = 0;
    for (int k = 0; k < total; k++) m[$urandom_range(0, ND - 1)] += 1;
    return m;
  endfunction

  function automatic tdm_t skews();
    tdm_t s;
    foreach (s[d]) s[d] = $urandom_range(0, 2);
    return s;
  endfunction

  int kind_n[4] = '{0, 0, 0, 0};
  int exp_trig = 0, exp_mb = 0, exp_cen = 0, exp_tof = 0;
  int got = 0;
  logic [2:0] c;

  initial begin
    repeat (4) @(negedge clk);
    rst = 0;
    daq({DAQ_CFG, REG_T0_DLY, 24'd20});
    daq({DAQ_CFG, REG_AC_DLY, 24'd20});
    daq({DAQ_SYNC, 20'd0, CMD_START});
    check(running, "run started");
    for (int e = 0; e < NEV; e++) begin
      int kind, mi_t, me_t, m, len;
      bit t0, ac, want;
      logic [2:0] want_c;
      tdm_t mi, me;
      kind = $urandom_range(0, 3);
      // totals: mostly inside 0..130 so that every class boundary is crossed
      mi_t = $urandom_range(1, 60);
      me_t = $urandom_range(1, 70);
      if ($urandom_range(0, 3) == 0) begin mi_t = $urandom_range(1, 4); me_t = $urandom_range(1, 8); end
      t0 = 1'b1;
      ac = (kind == 2);
      if (kind == 1 || kind == 3) mi_t = 0;       // iTOF silent
      mi = scatter(mi_t); me = scatter(me_t);
      m = mi_t + me_t;
      want = t0 && !ac && mi_t > 0 && me_t > 0 && m > 3 && m < 100;
      want_c = (m >= 10) ? 3'b100 : 3'b010;
      len = 120 + $urandom_range(0, 200);
      event_(mi, me, skews(), skews(), t0, ac, len, got, c);
      kind_n[kind]++;
      if (mi_t > 0 && me_t > 0) exp_tof++;
      if (want) begin
        exp_trig++;
        if (want_c[1]) exp_mb++; else exp_cen++;
        check(got == 1 && c == want_c, $sformatf("event %0d kind %0d M=%0d+%0d: %0d triggers class %b",
                                                 e, kind, mi_t, me_t, got, c));
      end else
        check(got == 0, $sformatf("event %0d kind %0d M=%0d+%0d: no trigger (%0d)", e, kind, mi_t, me_t, got));
    end
    repeat (50) @(negedge clk);
    $display("events: on target %0d, very peripheral %0d, upstream %0d, after TPC %0d; GTRG %0d (min. bias %0d, central %0d)",
             kind_n[0], kind_n[1], kind_n[2], kind_n[3], ntrig, nmb, ncen);
    check(ntrig == exp_trig && nmb == exp_mb && ncen == exp_cen, "GTRG totals match the model");
    foreach (kind_n[k]) check(kind_n[k] > 0, $sformatf("event kind %0d occurred", k));
    check(exp_mb > 0 && exp_cen > 0, "both classes triggered");
    check(ntf[0] == ntrig && ntf[1] == ntrig, $sformatf("trigger frames on TPC and T0 lines: %0d, %0d", ntf[0], ntf[1]));
    // MTM state: [0] GTRG, [1] minimum bias, [2] central, [3] TOF coincidences
    rsp.delete(); daq({DAQ_STATE, 28'd0});
    check(rsp.size() == 5 && int'(rsp[0]) == exp_trig && int'(rsp[1]) == exp_mb &&
          int'(rsp[2]) == exp_cen && int'(rsp[3]) == exp_tof,
          $sformatf("MTM state counters (%0d words)", rsp.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NEV * 340 + 2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
