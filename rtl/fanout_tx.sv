// fanout_tx: downlink fan-out of the global trigger and control commands
// ("Fan-out module" of the MTM and of the STM L2).
//
// Trigger pulses and commands share the same downlink. Each is coded as a
// 10-bit payload ({kind, code}; a trigger is all zeros, so on a serial line it
// is a single start-bit pulse) and sent at once to all N_SER serial lines
// through one PISO and to all N_GTP transceiver lanes as a 16-bit word (bit 15
// = valid). A serial frame takes 11 cycles; a trigger arriving while a frame
// is on the line is held (one deep) and sent right after it, and `deferred`
// pulses. Triggers take priority over commands; `cmd_ready` is high when a
// command offered now would be sent. The paper says the trigger is fanned out
// to all subsystems and that control commands use the same links; the coding
// and the priority rule are this design's own.
module fanout_tx
  import cee_trig_pkg::*;
#(
  parameter int unsigned N_SER = 4,
  parameter int unsigned N_GTP = 4
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         trig,
  input  logic                         cmd_valid,
  input  logic [7:0]                   cmd_code,
  output logic                         cmd_ready,
  output logic [N_SER-1:0]             ser_out,
  output logic [N_GTP-1:0][GTP_W-1:0]  gtp_word,
  output logic                         sent_trig,
  output logic                         deferred,
  output logic                         lost
);
  logic          busy, pending, send_trig, send_cmd, ser;
  dl_payload_t   pay;

  assign send_trig = !busy && (trig || pending);
  assign send_cmd  = !busy && !(trig || pending) && cmd_valid;
  assign cmd_ready = !busy && !(trig || pending);

  always_comb begin
    pay.kind = KIND_TRIGGER;
    pay.code = 8'h00;
    if (send_cmd) begin
      pay.kind = KIND_COMMAND;
      pay.code = cmd_code;
    end
  end

  piso_tx #(.W(FRAME_W)) u_piso (
    .clk(clk), .rst(rst), .load(send_trig || send_cmd), .din(pay),
    .sdo(ser), .busy(busy), .dropped()
  );

  assign ser_out = {N_SER{ser}};

  always_ff @(posedge clk) begin
    if (rst) begin
      pending   <= 1'b0;
      gtp_word  <= '0;
      sent_trig <= 1'b0;
      deferred  <= 1'b0;
      lost      <= 1'b0;
    end else begin
      sent_trig <= send_trig;
      deferred  <= trig && busy;
      lost      <= trig && busy && pending;
      if (send_trig)      pending <= 1'b0;
      else if (trig)      pending <= 1'b1;
      for (int i = 0; i < N_GTP; i++)
        gtp_word[i] <= (send_trig || send_cmd) ? dl_word(pay) : '0;
    end
  end
endmodule
