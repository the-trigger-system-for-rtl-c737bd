// sync_fifo: small synchronous FIFO that queues global sync commands from the
// DAQ interface until the fan-out is free to send them ("FIFO" of the MTM
// diagram). DEPTH entries of W bits; a write when full is refused (`overflow`
// pulses for one cycle). Read data is valid whenever `empty` is low
// (first-word fall-through); `rd` pops it. Depth 8 is this design's choice.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         wr,
  input  logic [W-1:0] wdata,
  input  logic         rd,
  output logic [W-1:0] rdata,
  output logic         empty,
  output logic         full,
  output logic         overflow
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   count;
  logic          do_wr, do_rd;

  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign rdata = mem[rp];
  assign do_rd = rd && !empty;
  assign do_wr = wr && (!full || do_rd);

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= wr && !do_wr;
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  // a pop of an empty FIFO is a caller error
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) rd |-> !empty);
endmodule
