// cee_trig_pkg: constants and types shared by the CEE trigger logic.
//
// All trigger boards (STM L1, STM L2, MTM) run from one global 40 MHz clock,
// so every latency and window below is counted in 25 ns cycles. The uplink
// multiplicity format is 10 bits (as stated for the STM L2 -> MTM link), and the
// transceiver parallel word is 16 bits wide. The framing of serial electrical
// lines (one start bit, then the 10-bit word MSB first) follows the example
// "1'b1 + 0000000100" for a multiplicity of 4. The split of the downlink word
// into trigger and command codes, the command code values and the register map
// of the 32-bit mode command are this design's own choices.
package cee_trig_pkg;

  localparam int unsigned CLK_MHZ   = 40;  // global synchronous clock
  localparam int unsigned MULT_W    = 10;  // uplink multiplicity word
  localparam int unsigned FRAME_W   = 10;  // payload bits of one serial frame
  localparam int unsigned GTP_W     = 16;  // transceiver parallel word
  localparam int unsigned WIN_W     = 8;   // width of window / gate settings
  localparam int unsigned DLY_W     = 8;   // width of delay settings

  // Running modes selected by the DAQ.
  typedef enum logic [1:0] {
    MODE_BEAM     = 2'd0,   // GTRG = T0 & iTOF & eTOF & !AC, multiplicity classes
    MODE_COSMIC   = 2'd1,   // T0 and AC ignored, iTOF or eTOF multiplicity
    MODE_SELFTEST = 2'd2    // periodic trigger at a programmable period
  } trig_mode_e;

  // Downlink frame payload: [9:8] kind, [7:0] code.
  typedef enum logic [1:0] {
    KIND_TRIGGER = 2'b00,   // a trigger frame is a single start-bit pulse
    KIND_COMMAND = 2'b01
  } dl_kind_e;

  typedef enum logic [7:0] {
    CMD_NONE  = 8'h00,
    CMD_START = 8'h01,      // start acquisition
    CMD_STOP  = 8'h02,      // stop acquisition
    CMD_TSYNC = 8'h03       // time synchronisation: clear time stamps
  } sync_cmd_e;

  typedef struct packed {
    dl_kind_e   kind;
    logic [7:0] code;
  } dl_payload_t;

  // Downlink transceiver word: bit 15 marks a valid word, [9:0] the payload.
  function automatic logic [GTP_W-1:0] dl_word(dl_payload_t p);
    return {1'b1, 5'd0, p};
  endfunction

  // DAQ command word: [31:28] class, [27:24] register, [23:0] data.
  localparam logic [3:0] DAQ_CFG   = 4'h1;  // write a trigger setting
  localparam logic [3:0] DAQ_SYNC  = 4'h2;  // queue a global sync command
  localparam logic [3:0] DAQ_STATE = 4'h3;  // read the state word

  // Register numbers inside a DAQ_CFG command.
  localparam logic [3:0] REG_MODE     = 4'h0;
  localparam logic [3:0] REG_T0_DLY   = 4'h1;
  localparam logic [3:0] REG_AC_DLY   = 4'h2;
  localparam logic [3:0] REG_TOF_DLY  = 4'h3;
  localparam logic [3:0] REG_WIDTH    = 4'h4;  // [7:0] T0, [15:8] AC, [23:16] TOF
  localparam logic [3:0] REG_GATE     = 4'h5;  // coincidence gate of the MTM sum
  localparam logic [3:0] REG_M_LOW    = 4'h6;
  localparam logic [3:0] REG_M_EVT    = 4'h7;
  localparam logic [3:0] REG_M_HIGH   = 4'h8;
  localparam logic [3:0] REG_DIVIDE   = 4'h9;
  localparam logic [3:0] REG_PERIOD   = 4'hA;  // self-test period in cycles
  localparam logic [3:0] REG_SPILL    = 4'hB;  // [0] gate triggers with the spill input

  typedef struct packed {
    trig_mode_e        mode;
    logic [DLY_W-1:0]  t0_delay;
    logic [DLY_W-1:0]  ac_delay;
    logic [DLY_W-1:0]  tof_delay;
    logic [WIN_W-1:0]  t0_width;
    logic [WIN_W-1:0]  ac_width;
    logic [WIN_W-1:0]  tof_width;
    logic [WIN_W-1:0]  gate;
    logic [MULT_W-1:0] m_low;
    logic [MULT_W-1:0] m_evt;
    logic [MULT_W-1:0] m_high;
    logic [15:0]       divide;
    logic [23:0]       period;
    logic              spill_gate;
  } trig_cfg_t;

endpackage
