// tb_stm_l2: STM L2 board logic at its default size (10 STM L1). Sends
// multiplicity words from several STM L1 (skewed inside the 3-cycle window),
// decodes the serial frame to the MTM and checks the 10-bit saturated sum;
// makes a sum arrive while a frame is still on the line (lost, counted);
// sends downlink frames from the MTM and checks the 16-bit word on every
// STM L1 lane; reads the state word through the DAQ interface.
`timescale 1ns/1ps
module tb_stm_l2;
  import cee_trig_pkg::*;
  logic clk = 0, rst = 1, ser_up, ser_dn = 0, daq_valid = 0, daq_rsp_valid;
  logic [9:0][15:0] gtp_rx = '0, gtp_tx;
  logic [31:0] daq_cmd = '0;
  logic [15:0] daq_rsp;
  int checks = 0, failures = 0, cyc = 0;
  always #12.5 clk = ~clk;

  stm_l2 dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // decoder of the uplink serial line
  int bn = -1; logic [9:0] sh; logic [9:0] up[$];
  logic [15:0] dnw[$];
  logic [15:0] rsp[$];
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (bn < 0) begin if (ser_up) bn = 0; end
    else begin sh = {sh[8:0], ser_up}; bn++; if (bn == 10) begin up.push_back(sh); bn = -1; end end
    if (gtp_tx[0][15]) begin
      dnw.push_back(gtp_tx[0]);
      check(gtp_tx == {10{gtp_tx[0]}}, "same word on all lanes");
    end
    if (daq_rsp_valid) rsp.push_back(daq_rsp);
  end

  task automatic event_(int m[10], int sk[10]);
    for (int t = 0; t < 3; t++) begin
      @(negedge clk);
      for (int i = 0; i < 10; i++) gtp_rx[i] = (m[i] > 0 && sk[i] == t) ? 16'(m[i]) : 16'd0;
    end
    @(negedge clk); gtp_rx = '0;
  endtask

  int m[10], sk[10], exp_sum, n_exp = 0;
  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int trial = 0; trial < 20; trial++) begin
      exp_sum = 0;
      for (int i = 0; i < 10; i++) begin
        m[i] = ($urandom_range(0, 1) == 0) ? int'($urandom_range(1, (trial == 5) ? 400 : 30)) : 0;
        sk[i] = $urandom_range(0, 2);
        exp_sum += m[i];
      end
      if (exp_sum == 0) begin m[0] = 1; exp_sum = 1; end
      event_(m, sk);
      repeat (14) @(negedge clk);
      n_exp++;
      check(up.size() == n_exp, "one frame per event");
      if (up.size() == n_exp)
        check(up[n_exp-1] == 10'((exp_sum > 1023) ? 1023 : exp_sum), $sformatf("sum %0d got %0d", exp_sum, up[n_exp-1]));
    end
    // two events 5 cycles apart: the second finds the line busy and is lost
    m = '{5, 0, 0, 0, 0, 0, 0, 0, 0, 0}; sk = '{0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
    event_(m, sk);
    @(negedge clk);
    m[0] = 7;
    event_(m, sk);
    repeat (20) @(negedge clk);
    check(up.size() == n_exp + 1 && up[n_exp] == 10'd5, "second sum lost while busy");
    // downlink frames from the MTM
    foreach (dl_set[k]) begin
      logic [10:0] f;
      f = {1'b1, dl_set[k]};
      for (int b = 10; b >= 0; b--) begin @(negedge clk); ser_dn = f[b]; end
      @(negedge clk); ser_dn = 0;
      repeat (3) @(negedge clk);
      check(dnw.size() == k + 1 && dnw[k] == {1'b1, 5'd0, dl_set[k]}, $sformatf("downlink word %0d", k));
    end
    // state through the DAQ interface: [0] sums, [1] sent, [2] lost, [3] triggers, [4] commands
    @(negedge clk); daq_valid = 1; daq_cmd = {DAQ_STATE, 28'd0};
    @(negedge clk); daq_valid = 0;
    repeat (8) @(negedge clk);
    check(rsp.size() == 5, "five state words");
    if (rsp.size() == 5) begin
      check(rsp[0] == 16'(n_exp + 2) && rsp[1] == 16'(n_exp + 1) && rsp[2] == 16'd1,
            $sformatf("uplink counters %0d %0d %0d", rsp[0], rsp[1], rsp[2]));
      check(rsp[3] == 16'd2 && rsp[4] == 16'd1, "downlink counters");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [9:0] dl_set [3] = '{10'h000, {KIND_COMMAND, CMD_START}, 10'h000};

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
