// tb_thread_ctrl: walks one thread control unit through its modes with
// directed command sequences and compares mode, run/reset outputs and events
// after every step: reset -> IDLE with reset held; START -> RUN; HALT ->
// DEBUG with a HALTED event; STEP -> RUN for exactly one retired instruction
// then DEBUG; CONTINUE -> RUN; breakpoint -> DEBUG; STOP -> IDLE (no reset)
// with a STOPPED event and START resumes; pipeline error -> ERROR, which
// ignores START and leaves only on RESET. A second instance built with
// AUTO_START checks that it runs straight out of reset.
module tb_thread_ctrl;
  import dt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         cv, terr, tbp, ret, trst, trun, ev, trst2, trun2, ev2;
  ctrl_cmd_e    cmd;
  thread_mode_e mode, mode2;
  ctrl_evt_e    evt, evt2;

  thread_ctrl dut (.clk, .rst_n, .cmd_valid(cv), .cmd, .thread_error(terr), .thread_bp(tbp),
                   .retire(ret), .thread_reset(trst), .thread_run(trun), .mode, .evt_valid(ev), .evt);
  thread_ctrl #(.AUTO_START(1'b1)) dut2 (.clk, .rst_n, .cmd_valid(1'b0), .cmd(CMD_NOP),
                   .thread_error(1'b0), .thread_bp(1'b0), .retire(1'b0), .thread_reset(trst2),
                   .thread_run(trun2), .mode(mode2), .evt_valid(ev2), .evt(evt2));

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // apply for one cycle, then look at the result
  task automatic step(input logic c_v, input ctrl_cmd_e c, input logic e, input logic b, input logic r,
                      input thread_mode_e exp_mode, input logic exp_run, input logic exp_rst,
                      input logic exp_ev, input ctrl_evt_e exp_evt, input string what);
    @(negedge clk);
    cv = c_v; cmd = c; terr = e; tbp = b; ret = r;
    @(negedge clk);
    cv = 1'b0; terr = 1'b0; tbp = 1'b0; ret = 1'b0;
    check(mode == exp_mode && trun == exp_run && trst == exp_rst, {what, ": mode"});
    check(ev == exp_ev && (!exp_ev || evt == exp_evt), {what, ": event"});
  endtask

  initial begin
    cv = 1'b0; cmd = CMD_NOP; terr = 1'b0; tbp = 1'b0; ret = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(mode == MODE_IDLE && !trun && trst, "idle in reset after power-up");
    check(mode2 == MODE_RUN && trun2 && !trst2, "auto-start instance runs");
    step(1, CMD_HALT,     0, 0, 0, MODE_IDLE,  0, 1, 0, EVT_HALTED, "halt ignored in idle");
    step(1, CMD_START,    0, 0, 0, MODE_RUN,   1, 0, 0, EVT_HALTED, "start");
    step(0, CMD_NOP,      0, 0, 1, MODE_RUN,   1, 0, 0, EVT_HALTED, "retire while running");
    step(1, CMD_HALT,     0, 0, 0, MODE_DEBUG, 0, 0, 1, EVT_HALTED, "halt");
    step(1, CMD_STEP,     0, 0, 0, MODE_RUN,   1, 0, 0, EVT_HALTED, "step starts");
    step(0, CMD_NOP,      0, 0, 0, MODE_RUN,   1, 0, 0, EVT_HALTED, "step waits for retire");
    step(0, CMD_NOP,      0, 0, 1, MODE_DEBUG, 0, 0, 1, EVT_HALTED, "step ends after one");
    step(1, CMD_CONTINUE, 0, 0, 0, MODE_RUN,   1, 0, 0, EVT_HALTED, "continue");
    step(0, CMD_NOP,      0, 0, 1, MODE_RUN,   1, 0, 0, EVT_HALTED, "no step after continue");
    step(0, CMD_NOP,      0, 1, 0, MODE_DEBUG, 0, 0, 1, EVT_HALTED, "breakpoint");
    step(1, CMD_CONTINUE, 0, 0, 0, MODE_RUN,   1, 0, 0, EVT_HALTED, "continue again");
    step(1, CMD_STOP,     0, 0, 0, MODE_IDLE,  0, 0, 1, EVT_STOPPED, "stop (deactivate)");
    step(1, CMD_START,    0, 0, 0, MODE_RUN,   1, 0, 0, EVT_HALTED, "resume");
    step(0, CMD_NOP,      1, 0, 0, MODE_ERROR, 0, 0, 1, EVT_ERROR, "error");
    step(1, CMD_START,    0, 0, 0, MODE_ERROR, 0, 0, 0, EVT_HALTED, "start ignored in error");
    step(1, CMD_RESET,    0, 0, 0, MODE_IDLE,  0, 1, 0, EVT_HALTED, "reset");
    step(1, CMD_START,    0, 0, 0, MODE_RUN,   1, 0, 0, EVT_HALTED, "restart");
    step(1, CMD_RESET,    0, 0, 0, MODE_IDLE,  0, 1, 0, EVT_HALTED, "reset while running");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
