// mtm: trigger logic of the Master Trigger Module.
//
// Uplink: the iTOF and eTOF STM L2 boards send their total multiplicity as
// serial frames (start bit + 10 bits) on `ser_itof`/`ser_etof`; T0 and AC
// STM L1 boards send 16-bit transceiver words (non-zero = fired). The two TOF
// words are deserialised and summed within the programmable coincidence gate;
// in beam mode both TOF walls must report (iTOF x eTOF), in cosmic mode
// either. The threshold judge classifies the total multiplicity, the
// classes, T0 and AC are each delayed and widened, and the global trigger
// logic forms GTRG = T0 & !AC & class (central class through the divider),
// or the self-test pulse in self-test mode. GTRG is passed only while the
// run is started and, when selected, while `spill` (slow extraction) is high.
// Downlink: GTRG and the global sync commands (start, stop, time sync) queued
// by the DAQ are fanned out as serial frames to the N_L2 STM L2 boards and as
// 16-bit words to the N_L1 single-level STM L1 boards (T0, AC, ZDC, pixel).
// DAQ: 32-bit command words set the trigger registers, queue sync commands or
// read the 80-bit state word (16-bit counters: [0] GTRG, [1] minimum-bias,
// [2] central, [3] TOF events seen, [4] triggers deferred behind a frame).
// The 48-bit global time stamp (40 MHz cycles since the last time-sync
// command went out) is brought out on `timestamp`.
// The block structure follows the MTM block diagram; widths of internal
// settings, the frame coding and the register map are this design's own.
module mtm
  import cee_trig_pkg::*;
#(
  parameter int unsigned N_L2 = 4,
  parameter int unsigned N_L1 = 4
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        ser_itof,
  input  logic                        ser_etof,
  input  logic [GTP_W-1:0]            gtp_t0,
  input  logic [GTP_W-1:0]            gtp_ac,
  input  logic                        spill,
  output logic [N_L2-1:0]             ser_out,
  output logic [N_L1-1:0][GTP_W-1:0]  gtp_out,
  input  logic                        daq_valid,
  input  logic [31:0]                 daq_cmd,
  output logic                        daq_rsp_valid,
  output logic [15:0]                 daq_rsp,
  output logic                        gtrg,
  output logic [2:0]                  gtrg_cls,
  output logic                        running,
  output logic [47:0]                 timestamp
);
  trig_cfg_t                 cfg;
  logic [1:0]                tof_valid;
  logic [1:0][MULT_W-1:0]    tof_mult;
  logic [MULT_W-1:0]         tof_sum;
  logic [1:0]                tof_mask;
  logic                      sum_valid, tof_event;
  logic                      low_thr, high_thr, noise;
  logic                      low_w, high_w, t0_w, ac_w;
  logic                      selftest, enable, blocked;
  logic                      mode_valid, sync_wr, fifo_rd, fifo_empty, unused_full, unused_ovf;
  logic [31:0]               mode_cmd;
  logic [7:0]                sync_code, fifo_data, cmd_code;
  logic                      cmd_valid, cmd_ready, sent_trig, deferred, unused_lost;
  logic [79:0]               state;

  // ---- uplink: TOF multiplicity --------------------------------------------
  sipo_rx #(.W(MULT_W)) u_rx_itof (
    .clk(clk), .rst(rst), .sdi(ser_itof), .dout(tof_mult[0]), .valid(tof_valid[0]));
  sipo_rx #(.W(MULT_W)) u_rx_etof (
    .clk(clk), .rst(rst), .sdi(ser_etof), .dout(tof_mult[1]), .valid(tof_valid[1]));

  mult_sum #(.N(2), .IN_W(MULT_W), .OUT_W(MULT_W)) u_sum (
    .clk(clk), .rst(rst), .window(cfg.gate), .in_valid(tof_valid), .in_mult(tof_mult),
    .sum(tof_sum), .mask(tof_mask), .valid(sum_valid));

  assign tof_event = sum_valid && ((cfg.mode == MODE_BEAM) ? (tof_mask == 2'b11) : (tof_mask != 2'b00));

  mtm_thr_judge #(.W(MULT_W)) u_thr (
    .clk(clk), .rst(rst), .m_low(cfg.m_low), .m_evt(cfg.m_evt), .m_high(cfg.m_high),
    .valid(tof_event), .mult(tof_sum), .low_thr(low_thr), .high_thr(high_thr), .noise(noise));

  // ---- delay and widen -------------------------------------------------------
  delay_widen u_dw_low  (.clk(clk), .rst(rst), .delay(cfg.tof_delay), .width(cfg.tof_width),
                         .din(low_thr),  .dout(low_w));
  delay_widen u_dw_high (.clk(clk), .rst(rst), .delay(cfg.tof_delay), .width(cfg.tof_width),
                         .din(high_thr), .dout(high_w));
  delay_widen u_dw_t0   (.clk(clk), .rst(rst), .delay(cfg.t0_delay),  .width(cfg.t0_width),
                         .din(gtp_t0 != '0), .dout(t0_w));
  delay_widen u_dw_ac   (.clk(clk), .rst(rst), .delay(cfg.ac_delay),  .width(cfg.ac_width),
                         .din(gtp_ac != '0), .dout(ac_w));

  // ---- global trigger --------------------------------------------------------
  selftest_gen #(.W(24)) u_self (
    .clk(clk), .rst(rst), .enable(cfg.mode == MODE_SELFTEST), .period(cfg.period), .pulse(selftest));

  assign enable = running && (!cfg.spill_gate || spill);

  gtrg_logic u_gtrg (
    .clk(clk), .rst(rst), .mode(cfg.mode), .divide(cfg.divide), .enable(enable),
    .t0(t0_w), .ac(ac_w), .low_thr(low_w), .high_thr(high_w), .selftest(selftest),
    .gtrg(gtrg), .cls(gtrg_cls), .blocked(blocked));

  // ---- DAQ, mode control, global sync ---------------------------------------
  daq_if #(.SW(80)) u_daq (
    .clk(clk), .rst(rst), .cmd_valid(daq_valid), .cmd(daq_cmd),
    .mode_valid(mode_valid), .mode_cmd(mode_cmd), .sync_wr(sync_wr), .sync_code(sync_code),
    .state(state), .rsp_valid(daq_rsp_valid), .rsp_data(daq_rsp));

  trig_mode_ctrl u_mode (
    .clk(clk), .rst(rst), .cmd_valid(mode_valid), .cmd(mode_cmd), .cfg(cfg));

  sync_fifo #(.W(8), .DEPTH(8)) u_fifo (
    .clk(clk), .rst(rst), .wr(sync_wr), .wdata(sync_code), .rd(fifo_rd), .rdata(fifo_data),
    .empty(fifo_empty), .full(unused_full), .overflow(unused_ovf));

  global_sync u_sync (
    .clk(clk), .rst(rst), .fifo_empty(fifo_empty), .fifo_data(fifo_data), .fifo_rd(fifo_rd),
    .cmd_ready(cmd_ready), .cmd_valid(cmd_valid), .cmd_code(cmd_code),
    .running(running), .timestamp(timestamp));

  // ---- downlink fan-out ------------------------------------------------------
  fanout_tx #(.N_SER(N_L2), .N_GTP(N_L1)) u_fan (
    .clk(clk), .rst(rst), .trig(gtrg), .cmd_valid(cmd_valid), .cmd_code(cmd_code),
    .cmd_ready(cmd_ready), .ser_out(ser_out), .gtp_word(gtp_out),
    .sent_trig(sent_trig), .deferred(deferred), .lost(unused_lost));

  state_module #(.N_CNT(5), .CNT_W(16)) u_state (
    .clk(clk), .rst(rst), .clear(1'b0),
    .event_in({deferred, tof_event, gtrg && gtrg_cls[2], gtrg && gtrg_cls[1], gtrg}),
    .state(state));
endmodule
