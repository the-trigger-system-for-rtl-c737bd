// tb_sipo_rx: drives start-bit framed words onto the line and checks the
// received word and that `valid` comes exactly one cycle after the last bit;
// idle gaps of one to four cycles are exercised.
`timescale 1ns/1ps
module tb_sipo_rx;
  logic clk = 0, rst = 1, sdi = 0, valid;
  logic [9:0] dout;
  int checks = 0, failures = 0, nvalid = 0;
  always #12.5 clk = ~clk;

  sipo_rx #(.W(10)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (!rst && valid) nvalid++;

  task automatic frame(logic [9:0] w, int gap);
    logic [10:0] f;
    f = {1'b1, w};
    for (int b = 10; b >= 0; b--) begin
      sdi = f[b];
      @(negedge clk);
      if (b > 0) check(!valid, "no valid inside frame");
    end
    sdi = 0;
    check(valid && dout == w, $sformatf("word %h got %h valid %0b", w, dout, valid));
    @(negedge clk);
    check(!valid, "valid lasts one cycle");
    repeat (gap > 0 ? gap - 1 : 0) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    frame(10'b0000000100, 3);
    frame(10'h3ff, 0);
    frame(10'h001, 1);
    for (int i = 0; i < 30; i++) frame(10'($urandom), $urandom_range(0, 4));
    repeat (5) @(negedge clk);
    check(nvalid == 33, $sformatf("one valid per frame (%0d)", nvalid));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
