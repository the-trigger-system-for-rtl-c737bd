// mult_sum: windowed multiplicity summation ("multiplicity SUM module" of the
// STM L1, "preprocess & SUM module" of the STM L2 and of the MTM).
//
// N inputs each deliver a multiplicity word with a one-cycle valid. The first
// valid input opens a window of `window` cycles (counting the opening cycle);
// every valid input inside the window is added. One cycle after the window
// closes, `sum` (saturated to OUT_W bits), `mask` (which inputs contributed)
// and a one-cycle `valid` are presented. The next valid input after the
// window starts a new window; inputs of the closing cycle itself are included.
// The paper gives a 75 ns window for the STM L1 (3 cycles at 40 MHz) and makes
// the coincidence gate programmable; the "preprocess" step of the STM L2 and
// MTM is taken here to be this time alignment plus saturation to the 10-bit
// uplink format, which is this design's own reading. A window setting of 0
// behaves as 1.
module mult_sum #(
  parameter int unsigned N     = 10,
  parameter int unsigned IN_W  = 10,
  parameter int unsigned OUT_W = 16
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [7:0]            window,
  input  logic [N-1:0]          in_valid,
  input  logic [N-1:0][IN_W-1:0] in_mult,
  output logic [OUT_W-1:0]      sum,
  output logic [N-1:0]          mask,
  output logic                  valid
);
  localparam int unsigned ACC_W = IN_W + $clog2(N+1) + 8;  // headroom for window*N words

  logic [ACC_W-1:0] acc, acc_next, now_sum;
  logic [N-1:0]     msk;
  logic [7:0]       cnt;       // cycles of the open window so far, 0 = closed
  logic [7:0]       win_len;

  assign win_len = (window == 0) ? 8'd1 : window;

  always_comb begin
    now_sum = '0;
    for (int i = 0; i < N; i++)
      if (in_valid[i]) now_sum += ACC_W'(in_mult[i]);
    acc_next = ((cnt == 0) ? '0 : acc) + now_sum;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc   <= '0;
      msk   <= '0;
      cnt   <= '0;
      sum   <= '0;
      mask  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (cnt != 0 || in_valid != 0) begin
        if (cnt + 8'd1 >= win_len) begin
          // window closes in this cycle
          sum   <= (acc_next > ACC_W'({OUT_W{1'b1}})) ? {OUT_W{1'b1}} : OUT_W'(acc_next);
          mask  <= ((cnt == 0) ? '0 : msk) | in_valid;
          valid <= 1'b1;
          cnt   <= '0;
          acc   <= '0;
          msk   <= '0;
        end else begin
          acc <= acc_next;
          msk <= ((cnt == 0) ? '0 : msk) | in_valid;
          cnt <= cnt + 8'd1;
        end
      end
    end
  end
endmodule
