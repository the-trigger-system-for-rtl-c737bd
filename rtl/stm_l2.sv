// stm_l2: trigger logic of one Slave Trigger Module, level 2 (STM L2).
//
// Uplink (TOF branch): the 16-bit multiplicity words of N_L1 STM L1 boards
// (0 = no word) are aligned in a WINDOW-cycle window and summed ("preprocess
// & SUM"), saturated to the 10-bit uplink format and sent to the MTM as one
// serial frame (start bit + 10 bits). A sum that arrives while the previous
// frame is still on the line is lost and counted. Downlink (all branches):
// frames from the MTM are deserialised and the 10-bit payload is sent to all
// N_L1 STM L1 boards as a 16-bit transceiver word (bit 15 = valid). The DAQ
// interface serves an 80-bit state word of five 16-bit counters: [0] uplink
// sums, [1] frames sent, [2] frames lost, [3] triggers and [4] commands sent
// down. The summing window (3 cycles, as in the STM L1) and the frame coding
// are this design's choices; the paper gives the function and the 10-bit
// format. Latency: last L1 word to first bit on `ser_up` is WINDOW+1 cycles;
// `ser_dn` frame end to `gtp_tx` is 2 cycles. Tracking branches use
// HAS_UPLINK = 0.
module stm_l2
  import cee_trig_pkg::*;
#(
  parameter int unsigned N_L1       = 10,
  parameter int unsigned WINDOW     = 3,
  parameter bit          HAS_UPLINK = 1'b1
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [N_L1-1:0][GTP_W-1:0]  gtp_rx,
  output logic                        ser_up,
  input  logic                        ser_dn,
  output logic [N_L1-1:0][GTP_W-1:0]  gtp_tx,
  input  logic                        daq_valid,
  input  logic [31:0]                 daq_cmd,
  output logic                        daq_rsp_valid,
  output logic [15:0]                 daq_rsp
);
  logic [N_L1-1:0]     up_valid;
  logic [MULT_W-1:0]   sum;
  logic                sum_valid, busy_up;
  logic [N_L1-1:0]     unused_mask;
  logic [MULT_W-1:0]   dn_pay;
  logic                dn_valid;
  logic [79:0]         state;
  logic                unused_mv, unused_sw;
  logic [31:0]         unused_mc;
  logic [7:0]          unused_sc;

  if (HAS_UPLINK) begin : g_up
    for (genvar i = 0; i < N_L1; i++) begin : g_v
      assign up_valid[i] = (gtp_rx[i] != '0);
    end
    mult_sum #(.N(N_L1), .IN_W(GTP_W), .OUT_W(MULT_W)) u_sum (
      .clk(clk), .rst(rst), .window(8'(WINDOW)), .in_valid(up_valid), .in_mult(gtp_rx),
      .sum(sum), .mask(unused_mask), .valid(sum_valid)
    );
    piso_tx #(.W(MULT_W)) u_up (
      .clk(clk), .rst(rst), .load(sum_valid), .din(sum), .sdo(ser_up), .busy(busy_up), .dropped()
    );
  end else begin : g_noup
    assign up_valid    = '0;
    assign sum         = '0;
    assign sum_valid   = 1'b0;
    assign unused_mask = '0;
    assign busy_up     = 1'b0;
    assign ser_up      = 1'b0;
  end

  sipo_rx #(.W(FRAME_W)) u_dn (
    .clk(clk), .rst(rst), .sdi(ser_dn), .dout(dn_pay), .valid(dn_valid)
  );

  always_ff @(posedge clk) begin
    if (rst) gtp_tx <= '0;
    else     gtp_tx <= {N_L1{dn_valid ? {1'b1, 5'd0, dn_pay} : 16'd0}};
  end

  state_module #(.N_CNT(5), .CNT_W(16)) u_state (
    .clk(clk), .rst(rst), .clear(1'b0),
    .event_in({dn_valid && dn_pay[9:8] == KIND_COMMAND,
               dn_valid && dn_pay[9:8] == KIND_TRIGGER,
               sum_valid && busy_up, sum_valid && !busy_up, sum_valid}),
    .state(state)
  );

  daq_if #(.SW(80)) u_daq (
    .clk(clk), .rst(rst), .cmd_valid(daq_valid), .cmd(daq_cmd),
    .mode_valid(unused_mv), .mode_cmd(unused_mc), .sync_wr(unused_sw), .sync_code(unused_sc),
    .state(state), .rsp_valid(daq_rsp_valid), .rsp_data(daq_rsp)
  );
endmodule
