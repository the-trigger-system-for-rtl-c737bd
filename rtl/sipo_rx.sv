// sipo_rx: serial-in parallel-out receiver for the single-ended trigger lines.
//
// Idle line is 0. A 1 while idle is taken as the start bit; the next W cycles
// are shifted in, MSB first, and the word is presented on `dout` with `valid`
// high for one cycle in the cycle after its last bit. This is the inverse of
// piso_tx: a frame loaded into piso_tx at cycle t appears here with valid at
// t+W+2 when the line is wired directly. The frame format (start bit, then 10
// bits) follows the uplink example in the paper; the line is sampled with the
// common 40 MHz clock, which is possible because every board shares it.
module sipo_rx #(
  parameter int unsigned W = 10
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         sdi,
  output logic [W-1:0] dout,
  output logic         valid
);
  logic [W-1:0]           sh;
  logic [$clog2(W+1)-1:0] cnt;   // data bits still expected, 0 = idle

  always_ff @(posedge clk) begin
    if (rst) begin
      sh    <= '0;
      cnt   <= '0;
      dout  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (cnt != 0) begin
        sh  <= {sh[W-2:0], sdi};
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          dout  <= {sh[W-2:0], sdi};
          valid <= 1'b1;
        end
      end else if (sdi) begin
        cnt <= ($clog2(W+1))'(W);
      end
    end
  end
endmodule
