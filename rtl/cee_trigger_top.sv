// cee_trigger_top: the complete CEE trigger system, all boards in one clock
// domain.
//
// Structure (master-slave, as in the system diagram): two TOF branches (iTOF
// and eTOF), each one STM L2 with N_TOF_L1 STM L1 boards that take the local
// multiplicity of N_TDM time digitisation modules and drive N_TDM+1 downlink
// lines (the extra one goes to the clock module); two tracking branches (TPC
// and MWDC), each one STM L2 with N_TRK_L1 downlink-only STM L1 boards
// driving N_FEMM front-end lines; single-level STM L1 boards for T0 and AC
// (uplink and downlink) and for ZDC and the pixel detector (downlink only);
// and the MTM. The MTM serial outputs 0..3 go to the iTOF, eTOF, TPC and MWDC
// STM L2; its transceiver lanes 0..3 to the T0, AC, ZDC and pixel STM L1.
// The optical transceivers, fibres and the clock distribution are not
// modelled: transceiver words pass between boards directly in the same cycle,
// which is this design's simplification. Default sizes follow the system
// diagram (10 STM L1 per two-level branch) and the board diagrams (10 inputs
// and 10 + 1 outputs on a TOF STM L1). The MTM, the four STM L2 and the
// tracking STM L1 boards (as in their board diagrams) each have a DAQ command
// link brought out as ports.
module cee_trigger_top
  import cee_trig_pkg::*;
#(
  parameter int unsigned N_TOF_L1 = 10,
  parameter int unsigned N_TRK_L1 = 10,
  parameter int unsigned N_TDM    = 10,
  parameter int unsigned N_FEMM   = 10
) (
  input  logic                              clk,
  input  logic                              rst,
  // front-end uplink lines (serial frames, start bit + 10-bit multiplicity)
  input  logic [N_TOF_L1-1:0][N_TDM-1:0]    itof_in,
  input  logic [N_TOF_L1-1:0][N_TDM-1:0]    etof_in,
  input  logic                              t0_in,
  input  logic                              ac_in,
  input  logic [GTP_W-1:0]                  tof_l1_threshold,
  input  logic                              spill,
  // front-end downlink lines (serial frames, trigger = single pulse)
  output logic [N_TOF_L1-1:0][N_TDM:0]      itof_out,
  output logic [N_TOF_L1-1:0][N_TDM:0]      etof_out,
  output logic [N_TRK_L1-1:0][N_FEMM-1:0]   tpc_out,
  output logic [N_TRK_L1-1:0][N_FEMM-1:0]   mwdc_out,
  output logic [N_FEMM-1:0]                 t0_out,
  output logic [N_FEMM-1:0]                 ac_out,
  output logic [N_FEMM-1:0]                 zdc_out,
  output logic [N_FEMM-1:0]                 pix_out,
  // DAQ link of the MTM
  input  logic                              daq_valid,
  input  logic [31:0]                       daq_cmd,
  output logic                              daq_rsp_valid,
  output logic [15:0]                       daq_rsp,
  // DAQ links of the four STM L2 (0 iTOF, 1 eTOF, 2 TPC, 3 MWDC)
  input  logic [3:0]                        l2_daq_valid,
  input  logic [3:0][31:0]                  l2_daq_cmd,
  output logic [3:0]                        l2_daq_rsp_valid,
  output logic [3:0][15:0]                  l2_daq_rsp,
  // DAQ links of the tracking STM L1 boards ([0] TPC, [1] MWDC; board index)
  input  logic [1:0][N_TRK_L1-1:0]          trk_daq_valid,
  input  logic [1:0][N_TRK_L1-1:0][31:0]    trk_daq_cmd,
  output logic [1:0][N_TRK_L1-1:0]          trk_daq_rsp_valid,
  output logic [1:0][N_TRK_L1-1:0][15:0]    trk_daq_rsp,
  // state words of the single-level STM L1 (0 T0, 1 AC, 2 ZDC, 3 pixel)
  output logic [3:0][127:0]                 l1_state,
  // monitor
  output logic                              gtrg,
  output logic [2:0]                        gtrg_cls,
  output logic                              running,
  output logic [47:0]                       timestamp
);
  logic [3:0]                           mtm_ser;
  logic [3:0][GTP_W-1:0]                mtm_gtp;
  logic [3:0][GTP_W-1:0]                single_up;
  logic [3:0]                           l2_up;
  logic [N_TOF_L1-1:0][GTP_W-1:0]       itof_up, etof_up, itof_dn, etof_dn;
  logic [N_TRK_L1-1:0][GTP_W-1:0]       tpc_up, mwdc_up, tpc_dn, mwdc_dn;
  logic [N_TOF_L1-1:0][127:0]           unused_itof_st, unused_etof_st;
  logic [N_TRK_L1-1:0][127:0]           unused_tpc_st, unused_mwdc_st;

  // ---- TOF branches ----------------------------------------------------------
  for (genvar i = 0; i < N_TOF_L1; i++) begin : g_tof
    stm_l1 #(.N_IN(N_TDM), .N_OUT(N_TDM + 1)) u_itof_l1 (
      .clk(clk), .rst(rst), .threshold(tof_l1_threshold), .fee_in(itof_in[i]),
      .gtp_tx(itof_up[i]), .gtp_rx(itof_dn[i]), .fee_out(itof_out[i]), .state(unused_itof_st[i]),
      .daq_valid(1'b0), .daq_cmd('0), .daq_rsp_valid(), .daq_rsp());
    stm_l1 #(.N_IN(N_TDM), .N_OUT(N_TDM + 1)) u_etof_l1 (
      .clk(clk), .rst(rst), .threshold(tof_l1_threshold), .fee_in(etof_in[i]),
      .gtp_tx(etof_up[i]), .gtp_rx(etof_dn[i]), .fee_out(etof_out[i]), .state(unused_etof_st[i]),
      .daq_valid(1'b0), .daq_cmd('0), .daq_rsp_valid(), .daq_rsp());
  end

  stm_l2 #(.N_L1(N_TOF_L1)) u_itof_l2 (
    .clk(clk), .rst(rst), .gtp_rx(itof_up), .ser_up(l2_up[0]), .ser_dn(mtm_ser[0]),
    .gtp_tx(itof_dn), .daq_valid(l2_daq_valid[0]), .daq_cmd(l2_daq_cmd[0]),
    .daq_rsp_valid(l2_daq_rsp_valid[0]), .daq_rsp(l2_daq_rsp[0]));
  stm_l2 #(.N_L1(N_TOF_L1)) u_etof_l2 (
    .clk(clk), .rst(rst), .gtp_rx(etof_up), .ser_up(l2_up[1]), .ser_dn(mtm_ser[1]),
    .gtp_tx(etof_dn), .daq_valid(l2_daq_valid[1]), .daq_cmd(l2_daq_cmd[1]),
    .daq_rsp_valid(l2_daq_rsp_valid[1]), .daq_rsp(l2_daq_rsp[1]));

  // ---- tracking branches (downlink only) ------------------------------------
  for (genvar i = 0; i < N_TRK_L1; i++) begin : g_trk
    stm_l1 #(.N_IN(1), .N_OUT(N_FEMM), .HAS_UPLINK(1'b0), .HAS_DAQ(1'b1)) u_tpc_l1 (
      .clk(clk), .rst(rst), .threshold('0), .fee_in(1'b0),
      .gtp_tx(tpc_up[i]), .gtp_rx(tpc_dn[i]), .fee_out(tpc_out[i]), .state(unused_tpc_st[i]),
      .daq_valid(trk_daq_valid[0][i]), .daq_cmd(trk_daq_cmd[0][i]),
      .daq_rsp_valid(trk_daq_rsp_valid[0][i]), .daq_rsp(trk_daq_rsp[0][i]));
    stm_l1 #(.N_IN(1), .N_OUT(N_FEMM), .HAS_UPLINK(1'b0), .HAS_DAQ(1'b1)) u_mwdc_l1 (
      .clk(clk), .rst(rst), .threshold('0), .fee_in(1'b0),
      .gtp_tx(mwdc_up[i]), .gtp_rx(mwdc_dn[i]), .fee_out(mwdc_out[i]), .state(unused_mwdc_st[i]),
      .daq_valid(trk_daq_valid[1][i]), .daq_cmd(trk_daq_cmd[1][i]),
      .daq_rsp_valid(trk_daq_rsp_valid[1][i]), .daq_rsp(trk_daq_rsp[1][i]));
  end

  stm_l2 #(.N_L1(N_TRK_L1), .HAS_UPLINK(1'b0)) u_tpc_l2 (
    .clk(clk), .rst(rst), .gtp_rx(tpc_up), .ser_up(l2_up[2]), .ser_dn(mtm_ser[2]),
    .gtp_tx(tpc_dn), .daq_valid(l2_daq_valid[2]), .daq_cmd(l2_daq_cmd[2]),
    .daq_rsp_valid(l2_daq_rsp_valid[2]), .daq_rsp(l2_daq_rsp[2]));
  stm_l2 #(.N_L1(N_TRK_L1), .HAS_UPLINK(1'b0)) u_mwdc_l2 (
    .clk(clk), .rst(rst), .gtp_rx(mwdc_up), .ser_up(l2_up[3]), .ser_dn(mtm_ser[3]),
    .gtp_tx(mwdc_dn), .daq_valid(l2_daq_valid[3]), .daq_cmd(l2_daq_cmd[3]),
    .daq_rsp_valid(l2_daq_rsp_valid[3]), .daq_rsp(l2_daq_rsp[3]));

  // ---- single-level boards: T0, AC (up and down), ZDC, pixel (down) ---------
  stm_l1 #(.N_IN(1), .N_OUT(N_FEMM)) u_t0_l1 (
    .clk(clk), .rst(rst), .threshold(16'd1), .fee_in(t0_in),
    .gtp_tx(single_up[0]), .gtp_rx(mtm_gtp[0]), .fee_out(t0_out), .state(l1_state[0]),
      .daq_valid(1'b0), .daq_cmd('0), .daq_rsp_valid(), .daq_rsp());
  stm_l1 #(.N_IN(1), .N_OUT(N_FEMM)) u_ac_l1 (
    .clk(clk), .rst(rst), .threshold(16'd1), .fee_in(ac_in),
    .gtp_tx(single_up[1]), .gtp_rx(mtm_gtp[1]), .fee_out(ac_out), .state(l1_state[1]),
      .daq_valid(1'b0), .daq_cmd('0), .daq_rsp_valid(), .daq_rsp());
  stm_l1 #(.N_IN(1), .N_OUT(N_FEMM), .HAS_UPLINK(1'b0)) u_zdc_l1 (
    .clk(clk), .rst(rst), .threshold('0), .fee_in(1'b0),
    .gtp_tx(single_up[2]), .gtp_rx(mtm_gtp[2]), .fee_out(zdc_out), .state(l1_state[2]),
      .daq_valid(1'b0), .daq_cmd('0), .daq_rsp_valid(), .daq_rsp());
  stm_l1 #(.N_IN(1), .N_OUT(N_FEMM), .HAS_UPLINK(1'b0)) u_pix_l1 (
    .clk(clk), .rst(rst), .threshold('0), .fee_in(1'b0),
    .gtp_tx(single_up[3]), .gtp_rx(mtm_gtp[3]), .fee_out(pix_out), .state(l1_state[3]),
      .daq_valid(1'b0), .daq_cmd('0), .daq_rsp_valid(), .daq_rsp());

  // ---- master ---------------------------------------------------------------
  mtm #(.N_L2(4), .N_L1(4)) u_mtm (
    .clk(clk), .rst(rst), .ser_itof(l2_up[0]), .ser_etof(l2_up[1]),
    .gtp_t0(single_up[0]), .gtp_ac(single_up[1]), .spill(spill),
    .ser_out(mtm_ser), .gtp_out(mtm_gtp),
    .daq_valid(daq_valid), .daq_cmd(daq_cmd), .daq_rsp_valid(daq_rsp_valid), .daq_rsp(daq_rsp),
    .gtrg(gtrg), .gtrg_cls(gtrg_cls), .running(running), .timestamp(timestamp));
endmodule
