// mtm_thr_judge: event classification by total TOF multiplicity in the MTM
// ("threshold judge module").
//
// Three thresholds are used: the low noise threshold M_l, the event
// classification threshold M_e and the high noise threshold M_h. Events with
// M <= M_l or M >= M_h are noise. M_l < M < M_e is a minimum-bias event and
// raises `low_thr`; M_e <= M < M_h is a central or semi-central event and
// raises `high_thr`. The paper writes the classes with strict inequalities on
// both sides of M_e; putting M = M_e into the central class is this design's
// choice. Both flags are one-cycle pulses registered one cycle after `valid`,
// together with `noise` for rejected events.
module mtm_thr_judge #(
  parameter int unsigned W = 10
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] m_low,
  input  logic [W-1:0] m_evt,
  input  logic [W-1:0] m_high,
  input  logic         valid,
  input  logic [W-1:0] mult,
  output logic         low_thr,
  output logic         high_thr,
  output logic         noise
);
  logic in_range;
  assign in_range = (mult > m_low) && (mult < m_high);

  always_ff @(posedge clk) begin
    if (rst) begin
      low_thr  <= 1'b0;
      high_thr <= 1'b0;
      noise    <= 1'b0;
    end else begin
      low_thr  <= valid && in_range && (mult <  m_evt);
      high_thr <= valid && in_range && (mult >= m_evt);
      noise    <= valid && !in_range;
    end
  end
endmodule
