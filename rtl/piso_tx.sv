// piso_tx: parallel-in serial-out transmitter for the single-ended trigger lines.
//
// A word presented with load=1 is sent on `sdo` as one start bit (1) followed by
// its W bits, most significant bit first, one bit per 40 MHz cycle, so a frame
// lasts W+1 cycles. The frame format follows the uplink example "1'b1 +
// 0000000100" (multiplicity 4); sending the MSB first is this design's reading
// of that example. `busy` is high while a frame is on the line; a load during
// busy is ignored and reported on `dropped` for one cycle. The start bit
// appears on `sdo` in the cycle after the load (registered output); `busy`
// drops in the cycle of the last data bit, so frames can follow back to back.
module piso_tx #(
  parameter int unsigned W = 10
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         load,
  input  logic [W-1:0] din,
  output logic         sdo,
  output logic         busy,
  output logic         dropped
);
  logic [W-1:0]            sh;    // data bits, MSB leaves first
  logic [$clog2(W+1)-1:0]  left;  // data bits still to send

  assign busy = (left != 0);

  always_ff @(posedge clk) begin
    if (rst) begin
      sh      <= '0;
      left    <= '0;
      sdo     <= 1'b0;
      dropped <= 1'b0;
    end else begin
      dropped <= load && busy;
      if (busy) begin
        sdo  <= sh[W-1];
        sh   <= {sh[W-2:0], 1'b0};
        left <= left - 1'b1;
      end else if (load) begin
        sdo  <= 1'b1;                 // start bit
        sh   <= din;
        left <= ($clog2(W+1))'(W);
      end else begin
        sdo <= 1'b0;
      end
    end
  end
endmodule
