// gtrg_logic: global trigger construction of the MTM.
//
// Two AND gates combine the delayed and widened T0 and AC levels with the two
// multiplicity classes: T0 & !AC & low_thr (minimum bias) and T0 & !AC &
// high_thr (central), the second one passing through the fraction divider.
// Their rising edges are ORed into the global trigger, which is then gated by
// `enable` (acquisition running and, if selected, inside the spill). This
// follows the beam-mode condition GTRG = T0 x iTOF x eTOF x !AC and the gate
// symbols of the MTM block diagram (the iTOF x eTOF coincidence is formed in
// front of the threshold judge). In cosmic mode T0 and AC are left out; in
// self-test mode the periodic pulse replaces the multiplicity trigger.
// Which class the divider sits on follows the diagram's labels. Edge
// detection, so that one coincidence gives one trigger, is this design's
// choice. Output: `gtrg` one-cycle pulse one cycle after the qualifying edge,
// `cls` = {central, minimum bias, self-test}.
module gtrg_logic
  import cee_trig_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  trig_mode_e  mode,
  input  logic [15:0] divide,
  input  logic        enable,
  input  logic        t0,
  input  logic        ac,
  input  logic        low_thr,
  input  logic        high_thr,
  input  logic        selftest,
  output logic        gtrg,
  output logic [2:0]  cls,
  output logic        blocked   // a trigger condition seen while not enabled
);
  logic t0_eff, ac_eff, and_low, and_high, and_low_q, and_high_q;
  logic low_edge, high_edge, high_div, any;

  assign t0_eff    = (mode == MODE_BEAM) ? t0 : 1'b1;
  assign ac_eff    = (mode == MODE_BEAM) ? ac : 1'b0;
  assign and_low   = (mode != MODE_SELFTEST) && low_thr  && t0_eff && !ac_eff;
  assign and_high  = (mode != MODE_SELFTEST) && high_thr && t0_eff && !ac_eff;
  assign low_edge  = and_low  && !and_low_q;
  assign high_edge = and_high && !and_high_q;
  assign any       = low_edge || high_div || (mode == MODE_SELFTEST && selftest);

  divider #(.W(16)) u_div (
    .clk(clk), .rst(rst), .factor(divide), .din(high_edge && enable), .dout(high_div)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      and_low_q  <= 1'b0;
      and_high_q <= 1'b0;
      gtrg       <= 1'b0;
      cls        <= '0;
      blocked    <= 1'b0;
    end else begin
      and_low_q  <= and_low;
      and_high_q <= and_high;
      gtrg       <= enable && any;
      cls        <= {high_div, low_edge, mode == MODE_SELFTEST && selftest};
      blocked    <= !enable && (low_edge || high_edge || (mode == MODE_SELFTEST && selftest));
    end
  end
endmodule
