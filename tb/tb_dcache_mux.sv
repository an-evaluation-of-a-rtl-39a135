// tb_dcache_mux: random load/store traffic from two threads into the dcache
// mux, including locked sequences. A reference model of the round-robin
// choice and the lock is checked every cycle: only the chosen thread sees
// ready, request and thread id reach the cache, responses go back to the
// right thread, and while a thread holds the lock the other thread is never
// served. An atomic read-modify-write test then runs two threads that
// repeatedly do lock-load / store-unlock increments of one counter held in
// a small memory behind the mux; with the lock working no increment is lost.
module tb_dcache_mux;
  import dt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [1:0] tv, tr, trv;
  dc_req_t    treq [2];
  dc_rsp_t    trsp, crsp;
  logic       cv, cr, crv;
  dc_req_t    creq;

  dcache_mux dut (.clk, .rst_n, .t_req_valid(tv), .t_req_ready(tr), .t_req(treq),
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

  logic ref_last = 1'b1, ref_locked = 1'b0, ref_owner = 1'b0;
  int   locked_blocks = 0;
  logic [63:0] counter = '0;
  // atomic test state per thread: 0 idle, 1 locked load sent, 2 store sent
  int   ph [2] = '{0, 0};
  int   incs [2] = '{0, 0};
  int   stores = 0;
  logic [63:0] got [2];
  logic        got_v [2] = '{1'b0, 1'b0};
  logic phase2 = 1'b0;

  initial begin
    tv = '0; cr = 1'b0; crv = 1'b0; crsp = '0;
    for (int t = 0; t < 2; t++) treq[t] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge clk);
      // drive
      phase2 = (cyc >= 3000);
      cr = $urandom_range(0, 3) != 0;
      for (int t = 0; t < 2; t++) begin
        if (!phase2) begin
          if (!tv[t] || acc[t]) begin
            tv[t] = $urandom_range(0, 2) != 0;
            treq[t] = '0;
            treq[t].va   = {$urandom()} & 32'hFFFF_FFF8;
            treq[t].we   = 1'b0;
            treq[t].lock = ($urandom_range(0, 3) == 0);
            if (cyc >= 2950) begin  // drain: only release a held lock
              tv[t] = ref_locked && (ref_owner == 1'(t));
              treq[t].lock = 1'b0;
            end
          end
        end else begin
          // lock-load then store-unlock increment
          if (tv[t] && acc[t]) begin
            tv[t] = 1'b0;
            if (ph[t] == 2) begin ph[t] = 0; incs[t]++; end
            else if (ph[t] == 1) ph[t] = 3;
          end
          if (!tv[t] && cyc > 3005) begin
            if (ph[t] == 0) begin
              treq[t] = '0; treq[t].lock = 1'b1; tv[t] = 1'b1; ph[t] = 1;
            end else if (ph[t] == 3 && got_v[t] && $urandom_range(0, 1) == 1) begin
              got_v[t] = 1'b0;
              treq[t] = '0; treq[t].we = 1'b1; treq[t].wdata = got[t] + 1; treq[t].lock = 1'b0;
              tv[t] = 1'b1; ph[t] = 2;
            end
          end
        end
      end
      if (cyc == 3000) begin
        counter = '0; got[0] = '0; got[1] = '0;
      end
      #1;
      begin
        logic [1:0] elig;
        logic exp_sel;
        elig = tv;
        if (ref_locked) elig = tv & (2'b01 << ref_owner);
        exp_sel = (elig == 2'b11) ? ~ref_last : elig[1];
        if (ref_locked && tv[~ref_owner]) locked_blocks++;
        check(cv == |elig, "cache valid");
        if (|elig) begin
          check(creq.va == treq[exp_sel].va && creq.tid == exp_sel && creq.we == treq[exp_sel].we,
                "routed request");
          check(tr == (cr ? (2'b01 << exp_sel) : 2'b00), "ready to chosen thread only");
        end else check(tr == 2'b00, "no ready");
        check(trv == (crv ? (2'b01 << crsp.tid) : 2'b00), "response routing");
        // phase-2 responses
        if (phase2) for (int t = 0; t < 2; t++) if (trv[t] && ph[t] == 3) begin
          got[t] = trsp.rdata;
          got_v[t] = 1'b1;
        end
        crv = 1'b0;
        if (cv && cr) begin
          ref_last   = exp_sel;
          ref_locked = treq[exp_sel].lock;
          ref_owner  = exp_sel;
          // stand-in cache with one counter word
          crv  = 1'b1;
          crsp = '{tid: exp_sel, rdata: counter, err: 1'b0};
          if (creq.we) begin counter = creq.wdata; stores++; end
        end
      end
      acc = tv & tr;
    end
    check(locked_blocks > 50, "lock blocked the other thread");
    check(incs[0] > 20 && incs[1] > 20, "both threads incremented");
    check(counter == 64'(stores), "no increment lost");
    $display("increments t0=%0d t1=%0d counter=%0d", incs[0], incs[1], counter);
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
