// stm_l1: trigger logic of one Slave Trigger Module, level 1 (STM L1).
//
// Uplink (TOF boards, and the single-level T0 and AC boards): each of N_IN
// front-end lines carries serial frames (start bit + 10-bit local
// multiplicity) that are deserialised, summed in a WINDOW-cycle window
// (75 ns = 3 cycles in the paper), discriminated against `threshold` and put
// on the 16-bit uplink transceiver word `gtp_tx` for one cycle (0 = nothing).
// Downlink (all boards): a valid 16-bit word from the transceiver (bit 15 set)
// is serialised once and the frame is fanned out to all N_OUT front-end
// lines. The transceiver itself (8b/10b, serialisation to the fibre) is
// outside this module: `gtp_tx`/`gtp_rx` are its 16-bit parallel sides. The
// 128-bit `state` word holds eight 16-bit counters: [0] input frames, [1]
// windows summed, [2] words sent up, [3] windows rejected, [4] triggers and
// [5] commands received, [6] downlink frames lost while busy, [7] downlink
// frames sent. With HAS_DAQ = 1 (the tracking STM L1, whose block diagram
// shows a DAQ interface fed by an 80-bit state module) a daq_if answers
// DAQ_STATE requests with the 80-bit word {counters 4..7, counter 0}, i.e.
// five 16-bit words: input frames, triggers, commands, lost, sent. The choice
// of the five counters is this design's; with HAS_DAQ = 0 the DAQ response
// outputs are tied to 0.
// Latency: `gtp_tx` is valid WINDOW+2 cycles after the last bit of the
// earliest frame of an event (3 cycles after a frame that closes the window);
// a valid `gtp_rx` word puts the start bit on `fee_out` in the next cycle.
// Uplink-free boards (TPC, MWDC, ZDC, pixel) use HAS_UPLINK = 0.
module stm_l1
  import cee_trig_pkg::*;
#(
  parameter int unsigned N_IN       = 10,
  parameter int unsigned N_OUT      = 11,
  parameter int unsigned WINDOW     = 3,
  parameter bit          HAS_UPLINK = 1'b1,
  parameter bit          HAS_DAQ    = 1'b0
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [GTP_W-1:0]  threshold,
  input  logic [N_IN-1:0]   fee_in,
  output logic [GTP_W-1:0]  gtp_tx,
  input  logic [GTP_W-1:0]  gtp_rx,
  output logic [N_OUT-1:0]  fee_out,
  output logic [127:0]      state,
  // DAQ command link (used only with HAS_DAQ = 1)
  input  logic              daq_valid,
  input  logic [31:0]       daq_cmd,
  output logic              daq_rsp_valid,
  output logic [15:0]       daq_rsp
);
  logic [N_IN-1:0]             rx_valid;
  logic [N_IN-1:0][MULT_W-1:0] rx_mult;
  logic [GTP_W-1:0]            sum;
  logic                        sum_valid, pass, reject;
  logic [N_IN-1:0]             unused_mask;
  logic                        dn_ser, dn_drop, dn_busy;
  logic [7:0]                  ev;

  if (HAS_UPLINK) begin : g_up
    for (genvar i = 0; i < N_IN; i++) begin : g_rx
      sipo_rx #(.W(MULT_W)) u_rx (
        .clk(clk), .rst(rst), .sdi(fee_in[i]), .dout(rx_mult[i]), .valid(rx_valid[i])
      );
    end
    mult_sum #(.N(N_IN), .IN_W(MULT_W), .OUT_W(GTP_W)) u_sum (
      .clk(clk), .rst(rst), .window(8'(WINDOW)), .in_valid(rx_valid), .in_mult(rx_mult),
      .sum(sum), .mask(unused_mask), .valid(sum_valid)
    );
    l1_thr_judge #(.W(GTP_W)) u_thr (
      .clk(clk), .rst(rst), .threshold(threshold), .in_valid(sum_valid), .in_sum(sum),
      .word(gtp_tx), .pass(pass), .reject(reject)
    );
  end else begin : g_noup
    assign rx_valid    = '0;
    assign rx_mult     = '0;
    assign sum         = '0;
    assign sum_valid   = 1'b0;
    assign unused_mask = '0;
    assign pass        = 1'b0;
    assign reject      = 1'b0;
    assign gtp_tx      = '0;
  end

  // downlink: one word -> one serial frame on every front-end line
  piso_tx #(.W(FRAME_W)) u_dn (
    .clk(clk), .rst(rst), .load(gtp_rx[15]), .din(gtp_rx[FRAME_W-1:0]),
    .sdo(dn_ser), .busy(dn_busy), .dropped(dn_drop)
  );
  assign fee_out = {N_OUT{dn_ser}};

  assign ev = {gtp_rx[15] && !dn_busy, dn_drop,
               gtp_rx[15] && gtp_rx[9:8] == KIND_COMMAND,
               gtp_rx[15] && gtp_rx[9:8] == KIND_TRIGGER,
               reject, pass, sum_valid, |rx_valid};

  state_module #(.N_CNT(8), .CNT_W(16)) u_state (
    .clk(clk), .rst(rst), .clear(1'b0), .event_in(ev), .state(state)
  );

  if (HAS_DAQ) begin : g_daq
    logic        unused_mv, unused_sw;
    logic [31:0] unused_mc;
    logic [7:0]  unused_sc;
    daq_if #(.SW(80)) u_daq (
      .clk(clk), .rst(rst), .cmd_valid(daq_valid), .cmd(daq_cmd),
      .mode_valid(unused_mv), .mode_cmd(unused_mc), .sync_wr(unused_sw), .sync_code(unused_sc),
      .state({state[127:64], state[15:0]}), .rsp_valid(daq_rsp_valid), .rsp_data(daq_rsp)
    );
  end else begin : g_nodaq
    assign daq_rsp_valid = 1'b0;
    assign daq_rsp       = '0;
  end
endmodule
