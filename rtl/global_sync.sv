// global_sync: global control command issue and run state of the MTM
// ("global sync module").
//
// Commands queued in the sync FIFO (start acquisition, stop acquisition, time
// synchronisation) are taken one at a time and offered to the fan-out on
// `cmd_valid`/`cmd_code`, held until the fan-out takes them (`cmd_ready` in
// the same cycle). A command taken by the fan-out also updates the local
// state: START sets `running`, which
// enables the trigger output; STOP clears it; TSYNC clears the 48-bit global
// time stamp `timestamp`, which otherwise counts 40 MHz cycles. The paper says
// that these commands travel on the trigger links and that the trigger system
// provides global standard time; the command codes, the running flag and the
// time-stamp width are this design's choices. Unknown codes are dropped.
module global_sync
  import cee_trig_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        fifo_empty,
  input  logic [7:0]  fifo_data,
  output logic        fifo_rd,
  input  logic        cmd_ready,
  output logic        cmd_valid,
  output logic [7:0]  cmd_code,
  output logic        running,
  output logic [47:0] timestamp
);
  assign fifo_rd = !fifo_empty && !cmd_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      cmd_valid <= 1'b0;
      cmd_code  <= CMD_NONE;
      running   <= 1'b0;
      timestamp <= '0;
    end else begin
      timestamp <= timestamp + 1'b1;
      if (fifo_rd) begin
        // unknown codes are dropped here
        cmd_code  <= fifo_data;
        cmd_valid <= (fifo_data == CMD_START) || (fifo_data == CMD_STOP) || (fifo_data == CMD_TSYNC);
      end else if (cmd_valid && cmd_ready) begin
        cmd_valid <= 1'b0;
        unique case (cmd_code)
          CMD_START: running   <= 1'b1;
          CMD_STOP:  running   <= 1'b0;
          CMD_TSYNC: timestamp <= '0;
          default: ;
        endcase
      end
    end
  end

  // an offered command stays offered until the fan-out takes it
  a_hold: assert property (@(posedge clk) disable iff (rst)
                           cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd_code));
endmodule
