// divider: trigger fraction divider (prescaler) of the MTM.
//
// Passes one of every `factor` input pulses: the 1st, the (factor+1)th, and so
// on. A factor of 0 or 1 passes every pulse (the beam test ran with a division
// ratio of 1). `dout` is combinational from `din`, so the divider adds no
// latency to the trigger path; the counter is a 16-bit register (width chosen
// here, not given in the paper).
module divider #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] factor,
  input  logic         din,
  output logic         dout
);
  logic [W-1:0] cnt;   // pulses seen since the last one passed

  assign dout = din && (cnt == 0);

  always_ff @(posedge clk) begin
    if (rst) cnt <= '0;
    else if (din) cnt <= (factor <= 1 || cnt + 1'b1 >= factor) ? '0 : cnt + 1'b1;
  end
endmodule
