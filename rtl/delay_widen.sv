// delay_widen: adjustable delay and width extension of one trigger input.
//
// The MTM delays the T0, AC and TOF signals by programmable amounts so that
// they meet in the coincidence, and stretches each to a programmable width
// (the beam test used 900 ns delay for T0 and 200 ns width, i.e. 36 and 8
// cycles at 40 MHz). A rising edge of `din` at cycle t makes `dout` high from
// cycle t+delay+1 for `width` cycles; an edge inside an active output restarts
// the width. The delay line is a shift register of MAX_DELAY stages, so
// delays 0..MAX_DELAY are possible; the range (256 cycles = 6.4 us) is this
// design's choice, the paper gives none. Changing `delay` while edges are in
// flight can release an edge recorded at the old setting; settings are meant
// to be changed between runs.
module delay_widen #(
  parameter int unsigned MAX_DELAY = 256,
  parameter int unsigned DW        = 8,
  parameter int unsigned WW        = 8
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [DW-1:0] delay,
  input  logic [WW-1:0] width,
  input  logic          din,
  output logic          dout
);
  logic [MAX_DELAY-1:0] line;
  logic                 din_q, edge_in, edge_dly;
  logic [WW-1:0]        cnt;

  assign edge_in  = din && !din_q;
  assign edge_dly = (delay == 0) ? edge_in
                  : (32'(delay) > MAX_DELAY) ? line[MAX_DELAY-1] : line[32'(delay) - 1];
  assign dout     = (cnt != 0);

  always_ff @(posedge clk) begin
    if (rst) begin
      line  <= '0;
      din_q <= 1'b0;
      cnt   <= '0;
    end else begin
      din_q <= din;
      line  <= {line[MAX_DELAY-2:0], edge_in};
      if (edge_dly)      cnt <= width;
      else if (cnt != 0) cnt <= cnt - 1'b1;
    end
  end
endmodule
