// tb_piso_tx: checks the serial frame of piso_tx bit by bit against a frame
// built in the testbench (start bit, then the word MSB first), the 11-cycle
// frame length, the busy flag and the refusal of a load during a frame.
`timescale 1ns/1ps
module tb_piso_tx;
  logic clk = 0, rst = 1, load = 0, sdo, busy, dropped;
  logic [9:0] din = '0;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  piso_tx #(.W(10)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic send_and_check(logic [9:0] w);
    logic [10:0] exp_frame;
    exp_frame = {1'b1, w};
    @(negedge clk); load = 1; din = w;
    @(negedge clk); load = 0;
    for (int b = 10; b >= 0; b--) begin
      check(sdo == exp_frame[b], $sformatf("word %h bit %0d", w, b));
      if (b == 10) check(busy, "busy during frame");
      @(negedge clk);
    end
    check(sdo == 0 && !busy, "line idle after 11 bits");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    check(sdo == 0 && !busy, "idle after reset");
    send_and_check(10'b0000000100);   // multiplicity 4, the paper's example
    send_and_check(10'h3ff);
    send_and_check(10'h000);
    for (int i = 0; i < 20; i++) send_and_check(10'($urandom));
    // a load during a frame is refused
    @(negedge clk); load = 1; din = 10'h155;
    @(negedge clk); din = 10'h2aa;              // still loading while busy
    @(negedge clk); load = 0;
    check(dropped, "second load reported dropped");
    begin
      logic [10:0] got;
      got[10] = 1'b1;   // first bit was seen at the previous edge
      for (int b = 9; b >= 0; b--) begin got[b] = sdo; @(negedge clk); end
      check(got[9:0] == 10'h155, "first word kept");
    end
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
