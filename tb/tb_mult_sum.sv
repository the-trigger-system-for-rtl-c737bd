// tb_mult_sum: directed and random checks of the windowed sum. The reference
// keeps its own list of input events and, for every window, adds the words
// that fall inside [open, open+window-1]; it checks the sum, the contributor
// mask, saturation and that the result appears exactly `window` cycles after
// the window opened (3 cycles = 75 ns for the STM L1 setting).
`timescale 1ns/1ps
module tb_mult_sum;
  localparam int N = 4, IN_W = 10, OUT_W = 12;
  logic clk = 0, rst = 1;
  logic [7:0] window = 8'd3;
  logic [N-1:0] in_valid = '0;
  logic [N-1:0][IN_W-1:0] in_mult = '0;
  logic [OUT_W-1:0] sum;
  logic [N-1:0] mask;
  logic valid;
  int checks = 0, failures = 0, cyc = 0;
  always #12.5 clk = ~clk;

  mult_sum #(.N(N), .IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // reference: window bookkeeping from the recorded stimulus
  int open_at = -1, exp_sum = 0, exp_cycle = -1;
  logic [N-1:0] exp_mask;
  int unsigned wl;

  always @(posedge clk) if (!rst) begin
    // compare the output of this cycle with what the reference expects
    check(valid == (cyc == exp_cycle), $sformatf("valid timing (exp cycle %0d)", exp_cycle));
    if (valid && cyc == exp_cycle) begin
      check(sum == ((exp_sum > 4095) ? 4095 : exp_sum), $sformatf("sum %0d exp %0d", sum, exp_sum));
      check(mask == exp_mask, "mask");
    end
    // update the reference with the inputs sampled at this edge
    wl = (window == 0) ? 1 : window;
    if (open_at < 0 && in_valid != 0) begin
      open_at = cyc; exp_sum = 0; exp_mask = '0;
    end
    if (open_at >= 0) begin
      for (int i = 0; i < N; i++) if (in_valid[i]) begin exp_sum += in_mult[i]; exp_mask[i] = 1; end
      if (cyc == open_at + int'(wl) - 1) begin exp_cycle = cyc + 1; open_at = -1; end
    end
    cyc++;
  end

  task automatic drive(logic [N-1:0] v, int m0, int m1, int m2, int m3);
    @(negedge clk);
    in_valid = v;
    in_mult[0] = IN_W'(m0); in_mult[1] = IN_W'(m1); in_mult[2] = IN_W'(m2); in_mult[3] = IN_W'(m3);
  endtask

  logic [N-1:0] rv;
  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    // directed: 4 + 5 in the first cycle, 7 two cycles later -> 16
    drive(4'b0011, 4, 5, 0, 0);
    drive(4'b0000, 0, 0, 0, 0);
    drive(4'b0100, 0, 0, 7, 0);
    drive(4'b1000, 0, 0, 0, 2);   // next window
    drive(4'b0000, 0, 0, 0, 0);
    repeat (6) drive(4'b0000, 0, 0, 0, 0);
    // saturation: 4 x 1023 x 3 cycles > 4095
    repeat (3) drive(4'b1111, 1023, 1023, 1023, 1023);
    repeat (6) drive(4'b0000, 0, 0, 0, 0);
    // random traffic for several window settings
    foreach (window_set[k]) begin
      @(negedge clk); window = window_set[k]; in_valid = '0;
      repeat (300) begin
        for (int i = 0; i < N; i++) rv[i] = ($urandom_range(0, 9) == 0);
        drive(rv, $urandom_range(0, 50), $urandom_range(0, 50), $urandom_range(0, 50), $urandom_range(0, 50));
      end
      repeat (10) drive(4'b0000, 0, 0, 0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [7:0] window_set [4] = '{8'd3, 8'd1, 8'd6, 8'd0};

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
