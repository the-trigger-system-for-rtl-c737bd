// l1_thr_judge: noise threshold of the STM L1 ("threshold judge" in the STM L1).
//
// The summed multiplicity of one STM L1 is passed on to the transceiver as a
// 16-bit word only when it reaches `threshold`; otherwise nothing is sent.
// The uplink word is the multiplicity itself and a word of zero means "no
// event" (this encoding is this design's own choice; the paper gives only the
// 16-bit width and the purpose, suppressing background noise). Registered:
// `word` follows a valid input by one cycle and is held for that one cycle.
module l1_thr_judge #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] threshold,
  input  logic         in_valid,
  input  logic [W-1:0] in_sum,
  output logic [W-1:0] word,
  output logic         pass,
  output logic         reject
);
  always_ff @(posedge clk) begin
    if (rst) begin
      word   <= '0;
      pass   <= 1'b0;
      reject <= 1'b0;
    end else begin
      pass   <= in_valid && (in_sum >= threshold) && (in_sum != 0);
      reject <= in_valid && !((in_sum >= threshold) && (in_sum != 0));
      word   <= (in_valid && in_sum >= threshold) ? in_sum : '0;
    end
  end
endmodule
