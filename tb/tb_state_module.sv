// tb_state_module: random event pulses on 5 lines, counted in the testbench;
// checks every packed 16-bit counter, wrap-around, and clear.
`timescale 1ns/1ps
module tb_state_module;
  logic clk = 0, rst = 1, clear = 0;
  logic [4:0] event_in = '0;
  logic [79:0] state;
  int cnt[5];
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  state_module #(.N_CNT(5), .CNT_W(16)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic compare(string tag);
    for (int i = 0; i < 5; i++)
      check(state[i*16 +: 16] == 16'(cnt[i]), $sformatf("%s counter %0d = %0d exp %0d", tag, i, state[i*16 +: 16], cnt[i]));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    compare("reset");
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      event_in = 5'($urandom);
      for (int i = 0; i < 5; i++) if (event_in[i]) cnt[i]++;
    end
    @(negedge clk); event_in = '0;
    compare("random");
    // wrap counter 0 past 65535
    event_in = 5'b00001;
    repeat (65536) @(negedge clk);
    event_in = '0;
    cnt[0] += 65536;
    @(negedge clk);
    compare("wrap");
    clear = 1; @(negedge clk); clear = 0;
    foreach (cnt[i]) cnt[i] = 0;
    compare("clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (70000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
