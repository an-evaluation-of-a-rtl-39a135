// tb_icache_mux: random fetch traffic from two threads into the icache mux,
// with a cache stand-in that is randomly not ready and answers one cycle
// after each accepted request. Checked every cycle against a reference: only
// the chosen thread sees ready, the choice is round robin when both request,
// the request and stamped thread id reach the cache, and responses return
// only to the thread whose id they carry. Also checks that under constant
// contention each thread gets half of the accepted requests.
module tb_icache_mux;
  import dt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [1:0] tv, tr, trv;
  ic_req_t    treq [2];
  ic_rsp_t    trsp, crsp;
  logic       cv, cr, crv;
  ic_req_t    creq;

  icache_mux dut (.clk, .rst_n, .t_req_valid(tv), .t_req_ready(tr), .t_req(treq),
                  .t_rsp_valid(trv), .t_rsp(trsp), .c_req_valid(cv), .c_req_ready(cr),
                  .c_req(creq), .c_rsp_valid(crv), .c_rsp(crsp));

  int checks = 0, failures = 0;
  logic [1:0] acc = '0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  logic ref_last = 1'b1;
  int   grants [2] = '{0, 0};
  int   both_cycles = 0;
  logic contention = 1'b0;

  initial begin
    tv = '0; cr = 1'b0; crv = 1'b0; crsp = '0;
    for (int t = 0; t < 2; t++) treq[t] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // drive next cycle
      contention = (cyc >= 3000);
      cr = contention ? 1'b1 : ($urandom_range(0, 3) != 0);
      for (int t = 0; t < 2; t++) begin
        if (!tv[t] || acc[t]) begin
          tv[t] = contention ? 1'b1 : ($urandom_range(0, 2) != 0);
          treq[t].va  = {$urandom()} & 32'hFFFF_FFF8;
          treq[t].tid = 1'($urandom_range(0, 1));  // the mux must overwrite it
        end
      end
      #1;
      // reference selection
      begin
        logic exp_sel;
        exp_sel = (tv == 2'b11) ? ~ref_last : tv[1];
        check(cv == |tv, "cache valid");
        if (|tv) begin
          check(creq.va == treq[exp_sel].va && creq.tid == exp_sel, "routed request");
          check(tr == (cr ? (2'b01 << exp_sel) : 2'b00), "ready to chosen thread only");
        end else check(tr == 2'b00, "no ready when idle");
        check(trv == (crv ? (2'b01 << crsp.tid) : 2'b00), "response routing");
        if (crv) check(trsp.data == crsp.data, "response data");
        if (tv == 2'b11 && cr) both_cycles++;
        if (cv && cr) begin
          ref_last = exp_sel;
          if (contention) grants[exp_sel]++;
        end
        // cache stand-in: respond next cycle
        crv  = cv && cr;
        crsp = '{tid: creq.tid, data: {32'hC0DE_0000, creq.va}, err: 1'b0};
      end
      acc = tv & tr;
    end
    check(grants[0] == grants[1] || grants[0] == grants[1] + 1 || grants[1] == grants[0] + 1,
          "equal share under contention");
    check(both_cycles > 100, "contention exercised");
    $display("grants under contention: t0=%0d t1=%0d", grants[0], grants[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
