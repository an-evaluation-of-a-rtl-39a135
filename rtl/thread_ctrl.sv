// thread_ctrl: control unit of one hardware thread.
//
// It starts, stops, resets and debugs the execution pipeline it sits next to.
// Each thread has its own unit, so the two threads can be controlled
// independently, and a thread that is not needed can be deactivated: its
// pipeline is then held (thread_run = 0), which is where a clock gate saving
// its power would attach.
//
// Modes and transitions (cmd is accepted every cycle):
//   IDLE  : thread_run = 0. After reset or CMD_RESET, thread_reset is also 1.
//           CMD_START -> RUN (releases reset). Reset enters IDLE unless
//           AUTO_START is set, in which case the thread runs out of reset.
//   RUN   : thread_run = 1. thread_error -> ERROR (event ERROR);
//           thread_bp or CMD_HALT -> DEBUG (event HALTED); CMD_STOP -> IDLE
//           (event STOPPED, state kept, CMD_START resumes). While stepping,
//           the first retired instruction -> DEBUG (event HALTED).
//   DEBUG : thread_run = 0. CMD_CONTINUE -> RUN; CMD_STEP -> RUN for one
//           instruction; CMD_STOP -> IDLE.
//   ERROR : thread_run = 0; only CMD_RESET leaves it.
// CMD_RESET from any mode -> IDLE with thread_reset = 1.
// Mode changes take effect the cycle after the command or pipeline signal.
//
// The paper gives the unit's duties (thread initialisation, error handling,
// debug access, deactivation of a thread); the modes, commands and events
// are this design's own.
module thread_ctrl
  import dt_pkg::*;
#(
  parameter bit AUTO_START = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cmd_valid,
  input  ctrl_cmd_e    cmd,
  // from the pipeline
  input  logic         thread_error,
  input  logic         thread_bp,
  input  logic         retire,
  // to the pipeline
  output logic         thread_reset,
  output logic         thread_run,
  // status
  output thread_mode_e mode,
  output logic         evt_valid,
  output ctrl_evt_e    evt
);

  logic in_reset;
  logic step;

  assign thread_reset = in_reset;
  assign thread_run   = (mode == MODE_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode      <= AUTO_START ? MODE_RUN : MODE_IDLE;
      in_reset  <= !AUTO_START;
      step      <= 1'b0;
      evt_valid <= 1'b0;
      evt       <= EVT_HALTED;
    end else begin
      evt_valid <= 1'b0;
      if (cmd_valid && cmd == CMD_RESET) begin
        mode     <= MODE_IDLE;
        in_reset <= 1'b1;
        step     <= 1'b0;
      end else begin
        case (mode)
          MODE_IDLE: if (cmd_valid && cmd == CMD_START) begin
            mode     <= MODE_RUN;
            in_reset <= 1'b0;
          end
          MODE_RUN: begin
            if (thread_error) begin
              mode      <= MODE_ERROR;
              evt_valid <= 1'b1;
              evt       <= EVT_ERROR;
              step      <= 1'b0;
            end else if (thread_bp || (cmd_valid && cmd == CMD_HALT) || (step && retire)) begin
              mode      <= MODE_DEBUG;
              evt_valid <= 1'b1;
              evt       <= EVT_HALTED;
              step      <= 1'b0;
            end else if (cmd_valid && cmd == CMD_STOP) begin
              mode      <= MODE_IDLE;
              evt_valid <= 1'b1;
              evt       <= EVT_STOPPED;
            end
          end
          MODE_DEBUG: if (cmd_valid) begin
            case (cmd)
              CMD_CONTINUE: mode <= MODE_RUN;
              CMD_STEP: begin
                mode <= MODE_RUN;
                step <= 1'b1;
              end
              CMD_STOP: begin
                mode      <= MODE_IDLE;
                evt_valid <= 1'b1;
                evt       <= EVT_STOPPED;
              end
              default: ;
            endcase
          end
          default: ;  // MODE_ERROR: wait for CMD_RESET
        endcase
      end
    end
  end

  a_run_not_reset : assert property (@(posedge clk) disable iff (!rst_n)
    thread_run |-> !thread_reset);

endmodule
