// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, empty/full flags, overflow on a write to a full FIFO, and a
// simultaneous push and pop when full.
`timescale 1ns/1ps
module tb_sync_fifo;
  logic clk = 0, rst = 1, wr = 0, rd = 0, empty, full, overflow;
  logic [7:0] wdata = '0, rdata;
  logic [7:0] q[$];
  int checks = 0, failures = 0, novf = 0;
  always #12.5 clk = ~clk;

  sync_fifo #(.W(8), .DEPTH(8)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      check(empty == (q.size() == 0), "empty flag");
      check(full == (q.size() == 8), "full flag");
      if (q.size() > 0) check(rdata == q[0], $sformatf("head %h exp %h", rdata, q[0]));
      wr = ($urandom_range(0, 99) < ((i < 300) ? 60 : 40));
      rd = !empty && ($urandom_range(0, 99) < ((i < 300) ? 35 : 60));
      wdata = 8'($urandom);
      if (rd) void'(q.pop_front());
      if (wr && (q.size() < 8 || rd)) q.push_back(wdata);
      else if (wr) novf++;
    end
    @(negedge clk); wr = 0; rd = 0;
    check(novf > 0, "overflow case reached");
    // fill completely, then one more write must overflow
    while (!empty) begin rd = 1; @(negedge clk); end
    rd = 0; q.delete();
    for (int i = 0; i < 9; i++) begin wr = 1; wdata = 8'(i); @(negedge clk); end
    wr = 0;
    check(full, "full after 8 writes");
    check(overflow, "ninth write overflows");
    for (int i = 0; i < 8; i++) begin
      check(rdata == 8'(i), $sformatf("drain %0d", i));
      rd = 1; @(negedge clk);
    end
    rd = 0;
    check(empty, "empty after drain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
