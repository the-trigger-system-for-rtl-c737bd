// state_module: status counters of a trigger board ("state module").
//
// Every board has a state module whose word is read by the DAQ: 128 bits on
// the STM L1 and 80 bits on the STM L2 and the MTM, as printed in the block
// diagrams. The paper does not say what the word holds; here it is N_CNT
// 16-bit event counters, one per input pulse line, packed with counter 0 in
// the least significant bits (80 bits = 5 counters, 128 bits = 8). Counters
// wrap, and `clear` (for example the time-sync command) zeroes all of them.
// Counts are visible on `state` one cycle after the counted pulse.
module state_module #(
  parameter int unsigned N_CNT = 5,
  parameter int unsigned CNT_W = 16
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   clear,
  input  logic [N_CNT-1:0]       event_in,
  output logic [N_CNT*CNT_W-1:0] state
);
  always_ff @(posedge clk) begin
    if (rst || clear) begin
      state <= '0;
    end else begin
      for (int i = 0; i < N_CNT; i++)
        if (event_in[i]) state[i*CNT_W +: CNT_W] <= state[i*CNT_W +: CNT_W] + 1'b1;
    end
  end
endmodule
