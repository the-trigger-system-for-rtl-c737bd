// selftest_gen: periodic trigger source for the electronics self-test mode.
//
// In self-test mode the MTM triggers all subsystems at a frequency set by the
// user. While `enable` is high a one-cycle pulse is produced every `period`
// cycles, the first one `period` cycles after enable rises. A period of 0 is
// treated as "off". Expressing the frequency as a period in 40 MHz cycles
// (24 bits, down to about 2.4 Hz) is this design's choice.
module selftest_gen #(
  parameter int unsigned W = 24
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         enable,
  input  logic [W-1:0] period,
  output logic         pulse
);
  logic [W-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst || !enable || period == 0) begin
      cnt   <= '0;
      pulse <= 1'b0;
    end else if (cnt + 1'b1 >= period) begin
      cnt   <= '0;
      pulse <= 1'b1;
    end else begin
      cnt   <= cnt + 1'b1;
      pulse <= 1'b0;
    end
  end
endmodule
