// debug_aggregator: one control/debug port for both hardware threads.
//
// An external debugger (or the boot logic) sends commands tagged with a
// thread id, or with `cmd_all` to address both threads at once (for a common
// reset or start). The aggregator delivers each command to the control unit
// of the addressed thread(s) in the cycle it arrives; cmd_ready is 1 because
// the control units take a command every cycle.
//
// In the other direction the two control units raise one-cycle events
// (halted, error, stopped). Each thread has a one-entry holding register;
// held events leave through a single valid/ready response channel tagged with
// the thread id, alternating between the threads when both hold one. An event
// that arrives while its thread's register is still full replaces the older
// one and sets the sticky `evt_lost` flag. The current mode of both threads
// is always visible on `modes`.
//
// The paper names the aggregator and shows it joining the two control units
// to one outside port; the command/event channels, the holding registers and
// the arbitration are this design's choices.
module debug_aggregator
  import dt_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // external side
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  logic                cmd_tid,
  input  logic                cmd_all,
  input  ctrl_cmd_e           cmd,
  output logic                rsp_valid,
  input  logic                rsp_ready,
  output logic                rsp_tid,
  output ctrl_evt_e           rsp_evt,
  output thread_mode_e        modes [NTHREADS],
  output logic                evt_lost,
  // control unit side
  output logic [NTHREADS-1:0] u_cmd_valid,
  output ctrl_cmd_e           u_cmd,
  input  logic [NTHREADS-1:0] u_evt_valid,
  input  ctrl_evt_e           u_evt [NTHREADS],
  input  thread_mode_e        u_mode [NTHREADS]
);

  logic [NTHREADS-1:0] pend;
  ctrl_evt_e           held [NTHREADS];
  logic                last;
  logic                sel;

  assign cmd_ready      = 1'b1;
  assign u_cmd          = cmd;
  assign u_cmd_valid[0] = cmd_valid && (cmd_all || cmd_tid == 1'b0);
  assign u_cmd_valid[1] = cmd_valid && (cmd_all || cmd_tid == 1'b1);
  assign modes          = u_mode;

  assign sel       = (pend == 2'b11) ? ~last : pend[1];
  assign rsp_valid = |pend;
  assign rsp_tid   = sel;
  assign rsp_evt   = held[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend     <= '0;
      last     <= 1'b1;
      evt_lost <= 1'b0;
      for (int t = 0; t < NTHREADS; t++) held[t] <= EVT_HALTED;
    end else begin
      for (int t = 0; t < NTHREADS; t++) begin
        if (u_evt_valid[t]) begin
          held[t] <= u_evt[t];
          pend[t] <= 1'b1;
          if (pend[t] && !(rsp_valid && rsp_ready && sel == 1'(t))) evt_lost <= 1'b1;
        end else if (rsp_valid && rsp_ready && sel == 1'(t)) begin
          pend[t] <= 1'b0;
        end
      end
      if (rsp_valid && rsp_ready) last <= sel;
    end
  end

endmodule
