// daq_if: command register interface between a trigger board and the DAQ
// ("DAQ interface").
//
// The DAQ sends 32-bit command words (`cmd_valid` for one cycle). Bits
// [31:28] select what a word does: DAQ_CFG words are passed on as the 32-bit
// mode command, DAQ_SYNC words push their code [7:0] into the global sync
// FIFO (the "global sync flag"), and DAQ_STATE captures the board's state word
// and returns it as SW/16 consecutive 16-bit words on `rsp_data`/`rsp_valid`,
// least significant word first, starting two cycles after the request. The
// optical link to the DAQ (a 125 MHz transceiver on the real boards) is not
// part of this module: both sides are on the 40 MHz clock here, which is this
// design's simplification. The paper gives the command-register principle and
// the 32-bit and 80-bit widths; the word classes are this design's choice.
module daq_if
  import cee_trig_pkg::*;
#(
  parameter int unsigned SW = 80
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          cmd_valid,
  input  logic [31:0]   cmd,
  output logic          mode_valid,
  output logic [31:0]   mode_cmd,
  output logic          sync_wr,
  output logic [7:0]    sync_code,
  input  logic [SW-1:0] state,
  output logic          rsp_valid,
  output logic [15:0]   rsp_data
);
  localparam int unsigned NW = (SW + 15) / 16;

  logic [NW*16-1:0]          snap;
  logic [$clog2(NW+1)-1:0]   left;

  always_ff @(posedge clk) begin
    if (rst) begin
      mode_valid <= 1'b0;
      mode_cmd   <= '0;
      sync_wr    <= 1'b0;
      sync_code  <= '0;
      snap       <= '0;
      left       <= '0;
      rsp_valid  <= 1'b0;
      rsp_data   <= '0;
    end else begin
      mode_valid <= cmd_valid && cmd[31:28] == DAQ_CFG;
      sync_wr    <= cmd_valid && cmd[31:28] == DAQ_SYNC;
      if (cmd_valid) begin
        mode_cmd  <= cmd;
        sync_code <= cmd[7:0];
      end
      rsp_valid <= 1'b0;
      if (left != 0) begin
        rsp_valid <= 1'b1;
        rsp_data  <= snap[15:0];
        snap      <= snap >> 16;
        left      <= left - 1'b1;
      end else if (cmd_valid && cmd[31:28] == DAQ_STATE) begin
        snap <= (NW*16)'(state);
        left <= ($clog2(NW+1))'(NW);
      end
    end
  end
endmodule
