// trig_mode_ctrl: trigger mode and parameter register of the MTM ("trigger mode
// ctrl module").
//
// The DAQ interface hands over 32-bit mode command words (`cmd_valid` for one
// cycle). Bits [27:24] select a setting and [23:0] carry its value (register
// map in cee_trig_pkg); the new value is visible on `cfg` in the next cycle.
// The paper gives the 32-bit width and says that delays, coincidence gate
// width, fraction divide factor, thresholds and running mode are remotely
// configurable; the register map and the reset values are this design's
// choices. Reset values are the beam-test settings where the paper quotes them
// (T0 delay 900 ns, widths 200 ns, M_l=3, M_e=10, M_h=100, division ratio 1)
// and assumed otherwise.
module trig_mode_ctrl
  import cee_trig_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        cmd_valid,
  input  logic [31:0] cmd,
  output trig_cfg_t   cfg
);
  function automatic trig_cfg_t cfg_default();
    trig_cfg_t c;
    c.mode       = MODE_BEAM;
    c.t0_delay   = 8'd36;    // 900 ns
    c.ac_delay   = 8'd36;    // assumed equal to T0 (same uplink path)
    c.tof_delay  = 8'd0;     // "the delay of TOF signal is unchanged"
    c.t0_width   = 8'd8;     // 200 ns
    c.ac_width   = 8'd8;
    c.tof_width  = 8'd8;     // 200 ns
    c.gate       = 8'd3;     // 75 ns, as in the STM L1
    c.m_low      = 10'd3;
    c.m_evt      = 10'd10;
    c.m_high     = 10'd100;
    c.divide     = 16'd1;
    c.period     = 24'd40000; // 1 kHz
    c.spill_gate = 1'b0;
    return c;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg <= cfg_default();
    end else if (cmd_valid && cmd[31:28] == DAQ_CFG) begin
      unique case (cmd[27:24])
        REG_MODE:    cfg.mode       <= (cmd[1:0] == 2'd3) ? MODE_BEAM : trig_mode_e'(cmd[1:0]);
        REG_T0_DLY:  cfg.t0_delay   <= cmd[7:0];
        REG_AC_DLY:  cfg.ac_delay   <= cmd[7:0];
        REG_TOF_DLY: cfg.tof_delay  <= cmd[7:0];
        REG_WIDTH: begin
          cfg.t0_width  <= cmd[7:0];
          cfg.ac_width  <= cmd[15:8];
          cfg.tof_width <= cmd[23:16];
        end
        REG_GATE:    cfg.gate       <= cmd[7:0];
        REG_M_LOW:   cfg.m_low      <= cmd[9:0];
        REG_M_EVT:   cfg.m_evt      <= cmd[9:0];
        REG_M_HIGH:  cfg.m_high     <= cmd[9:0];
        REG_DIVIDE:  cfg.divide     <= cmd[15:0];
        REG_PERIOD:  cfg.period     <= cmd[23:0];
        REG_SPILL:   cfg.spill_gate <= cmd[0];
        default: ;
      endcase
    end
  end
endmodule
