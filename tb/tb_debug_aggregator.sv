// tb_debug_aggregator: commands and events through the control/debug
// aggregator. Checked: a command reaches only the addressed thread's control
// unit, `cmd_all` reaches both; events of the two threads arriving in the
// same cycle both come out, tagged with the right thread id, one after the
// other; an event held while the response channel is stalled is kept until
// taken; a second event for a thread whose event was not yet taken replaces
// it and sets evt_lost; modes pass through.
module tb_debug_aggregator;
  import dt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         cv, cr, ctid, call, rv, rrdy, rtid, lost;
  ctrl_cmd_e    cmd, ucmd;
  ctrl_evt_e    revt;
  thread_mode_e modes [2];
  thread_mode_e umode [2];
  logic [1:0]   ucv, uev;
  ctrl_evt_e    uevt [2];

  debug_aggregator dut (.clk, .rst_n, .cmd_valid(cv), .cmd_ready(cr), .cmd_tid(ctid), .cmd_all(call),
                        .cmd, .rsp_valid(rv), .rsp_ready(rrdy), .rsp_tid(rtid), .rsp_evt(revt),
                        .modes, .evt_lost(lost), .u_cmd_valid(ucv), .u_cmd(ucmd),
                        .u_evt_valid(uev), .u_evt(uevt), .u_mode(umode));

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    cv = 0; ctid = 0; call = 0; cmd = CMD_NOP; rrdy = 0; uev = '0;
    uevt[0] = EVT_HALTED; uevt[1] = EVT_HALTED; umode[0] = MODE_RUN; umode[1] = MODE_IDLE;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // command routing
    cv = 1; ctid = 1; cmd = CMD_START; #1;
    check(cr && ucv == 2'b10 && ucmd == CMD_START, "command to thread 1 only");
    ctid = 0; cmd = CMD_HALT; #1;
    check(ucv == 2'b01 && ucmd == CMD_HALT, "command to thread 0 only");
    call = 1; ctid = 1; cmd = CMD_RESET; #1;
    check(ucv == 2'b11, "command to both");
    cv = 0; call = 0; #1;
    check(ucv == 2'b00, "no command");
    check(modes[0] == MODE_RUN && modes[1] == MODE_IDLE, "modes visible");
    check(!rv, "no event yet");
    // simultaneous events, response channel stalled for a while
    @(negedge clk);
    uev = 2'b11; uevt[0] = EVT_ERROR; uevt[1] = EVT_STOPPED;
    @(negedge clk);
    uev = 2'b00;
    repeat (3) begin
      check(rv, "event held while stalled");
      @(negedge clk);
    end
    rrdy = 1; #1;
    begin
      logic first;
      first = rtid;
      check(rv && revt == (first ? EVT_STOPPED : EVT_ERROR), "first event");
      @(negedge clk); #1;
      check(rv && rtid == ~first && revt == (first ? EVT_ERROR : EVT_STOPPED), "second event");
      @(negedge clk); #1;
      check(!rv, "both taken");
    end
    check(!lost, "nothing lost");
    // overrun
    rrdy = 0;
    uev = 2'b01; uevt[0] = EVT_HALTED;
    @(negedge clk);
    uevt[0] = EVT_ERROR;
    @(negedge clk);
    uev = 2'b00; #1;
    check(lost, "overrun flagged");
    check(rv && rtid == 1'b0 && revt == EVT_ERROR, "newest event kept");
    rrdy = 1;
    @(negedge clk); #1;
    check(!rv, "taken");
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
