// tb_dual_thread_core: end-to-end run of the dual-threaded core at its full
// default size (two 128-entry instruction buffers, 32 KB 4-way instruction
// and data caches, 256-entry 8-way TLB) with the side-kick programming
// model: thread 0 is the main thread and hands work to thread 1 through a
// message channel in shared memory.
//
// The two execution pipelines are modelled by two testbench processes that
// issue instruction-pair fetches and loads/stores through the thread ports,
// one at a time, as an in-order pipeline would. The system bus memory model
// has a 30-cycle line fill. The run:
//   1. boot: page tables are placed in memory, the MMU is enabled, thread 1
//      is started through the debug port (thread 0 runs from reset);
//   2. thread 1 spins on the channel (its loop is fetched from its
//      instruction buffer); thread 0 posts a trivial task and waits for the
//      reply, several times: the round-trip time is measured;
//   3. dot product of two 64-element vectors: thread 1 sums the even
//      products, thread 0 the odd ones, thread 0 adds both halves;
//   4. both threads run 64 new instruction pairs of straight-line code;
//   5. mutex: both threads increment a shared counter under the cache lock
//      (locked load, then store that releases the lock) 50 times each;
//   6. a non-cacheable store/load pair, a load from an unmapped address
//      that must return an error, and a store to a read-only page that the
//      MMU must refuse on its way to memory;
//   7. thread 1 is deactivated through the debug port.
// Checked: every fetched instruction pair equals memory at the translated
// address, results of the dot product and the counter, the error, the
// STOPPED event and mode, memory holding every stored value at the end
// (write-through), and the referenced/modified bits the MMU wrote into the
// page tables. Each mechanism is counted and must occur at least once:
// instruction-buffer hits, icache/dcache hits and misses, both threads
// requesting the data cache in the same cycle, a thread's fetch and a
// thread's load/store stalled by the other thread's cache miss, a thread held off by the other's lock, TLB walks and hits,
// the MMU faults, the non-cacheable path, and thread start/stop.
module tb_dual_thread_core;
  import dt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [1:0]   if_req_valid, if_req_ready, if_rsp_valid, ibuf_flush;
  ic_req_t      if_req [2];
  ic_rsp_t      if_rsp [2];
  logic [1:0]   ls_req_valid, ls_req_ready, ls_rsp_valid;
  dc_req_t      ls_req [2];
  dc_rsp_t      ls_rsp;
  logic [1:0]   thread_error, thread_bp, retire, thread_reset, thread_run;
  logic         dbg_cmd_valid, dbg_cmd_ready, dbg_cmd_tid, dbg_cmd_all;
  ctrl_cmd_e    dbg_cmd;
  logic         dbg_rsp_valid, dbg_rsp_ready, dbg_rsp_tid, dbg_evt_lost;
  ctrl_evt_e    dbg_rsp_evt;
  thread_mode_e thread_mode [2];
  logic         mmu_reg_we, tlb_flush;
  logic [2:0]   mmu_reg_addr;
  logic [31:0]  mmu_reg_wdata, mmu_reg_rdata;
  logic         bus_req_valid, bus_req_ready, bus_rsp_valid;
  bus_req_t     bus_req;
  bus_rsp_t     bus_rsp;
  logic [1:0]   ibuf_hit;
  logic         icache_hit, icache_miss, dcache_hit, dcache_miss, dcache_wr_err;
  logic         tlb_hit, tlb_miss, mmu_fault;

  dual_thread_core dut (.*);
  sys_mem_model #(.WORDS(65536), .LAT(22), .WLAT(4)) mem (.clk, .rst_n, .req_valid(bus_req_valid),
      .req_ready(bus_req_ready), .req(bus_req), .rsp_valid(bus_rsp_valid), .rsp(bus_rsp));

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- address map ----------------
  // VA page p (p < 32) -> PA page 0x40 + p. Tables at PA 0x10000.
  localparam logic [31:0] SPIN_PC = 32'h0000_1000;  // thread 1 spin loop
  localparam logic [31:0] WORK_PC = 32'h0000_2000;  // worker code
  localparam logic [31:0] MAIN_PC = 32'h0000_3000;  // thread 0 code
  localparam logic [31:0] CH      = 32'h0000_8000;  // channel: +0 cmd, +8 result, +16 done
  localparam logic [31:0] XV      = 32'h0000_9000;
  localparam logic [31:0] YV      = 32'h0000_A000;
  localparam logic [31:0] MUTEX   = 32'h0000_B000;
  localparam logic [31:0] IOREG   = 32'h0001_F000;  // accessed non-cacheable
  localparam logic [31:0] ROPAGE  = 32'h0001_E000;  // mapped read-only
  localparam int          N       = 64;

  function automatic logic [35:0] v2p(input logic [31:0] va);
    return {4'h0, 20'h00040 + 20'(va[31:12]), va[11:0]};
  endfunction
  function automatic logic [63:0] rd_pa(input logic [35:0] pa);
    return mem.mem[pa[18:3]];
  endfunction
  // level-3 page table entry of a virtual address
  function automatic logic [31:0] pte_of(input logic [31:0] va);
    logic [35:0] a;
    a = 36'h11800 + 36'(va[31:12]) * 4;
    return a[2] ? mem.mem[a[18:3]][31:0] : mem.mem[a[18:3]][63:32];
  endfunction

  // ---------------- mechanism counters ----------------
  int n_ibuf_hit = 0, n_ic_hit = 0, n_ic_miss = 0, n_dc_hit = 0, n_dc_miss = 0;
  int n_tlb_hit = 0, n_tlb_miss = 0, n_fault = 0, n_imux_both = 0, n_dmux_both = 0;
  int n_wr_err = 0, n_miss_stall = 0, n_imiss_stall = 0, n_lock_block = 0, n_nc = 0, n_start = 0, n_stop = 0;
  always @(posedge clk) if (rst_n) begin
    n_ibuf_hit += int'(ibuf_hit[0]) + int'(ibuf_hit[1]);
    n_ic_hit   += int'(icache_hit);
    n_ic_miss  += int'(icache_miss);
    n_dc_hit   += int'(dcache_hit);
    n_dc_miss  += int'(dcache_miss);
    n_tlb_hit  += int'(tlb_hit);
    n_tlb_miss += int'(tlb_miss);
    n_fault    += int'(mmu_fault);
    n_wr_err   += int'(dcache_wr_err);
    if (dut.ib_c_valid == 2'b11) n_imux_both++;
    if (ls_req_valid == 2'b11) n_dmux_both++;
    for (int t = 0; t < 2; t++) begin
      if (ls_req_valid[t] && !ls_req_ready[t] && dut.u_dcache.state != dut.u_dcache.S_RUN &&
          dut.u_dcache.q.tid != 1'(t)) n_miss_stall++;
      if (dut.ib_c_valid[t] && !dut.ib_c_ready[t] && dut.u_icache.state != dut.u_icache.S_RUN &&
          dut.u_icache.q.tid != 1'(t)) n_imiss_stall++;
      if (ls_req_valid[t] && dut.u_dmux.locked && dut.u_dmux.lock_owner != 1'(t)) n_lock_block++;
    end
    if (dut.dc_req_valid && dut.dc_req_ready && dut.dc_req.nc) n_nc++;
  end

  // ---------------- thread port tasks ----------------
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic fetch(input int t, input logic [31:0] pc);
    @(negedge clk);
    if_req_valid[t] = 1'b1; if_req[t].va = pc; if_req[t].tid = 1'(t); if_req[t].sup = 1'b1;
    #1;
    while (!if_req_ready[t]) begin @(negedge clk); #1; end
    @(negedge clk);
    if_req_valid[t] = 1'b0;
    while (!if_rsp_valid[t]) @(negedge clk);
    check(!if_rsp[t].err && if_rsp[t].data == rd_pa(v2p(pc)), "fetched pair");
  endtask

  task automatic ls(input int t, input logic [31:0] va, input logic we, input logic [63:0] wd,
                    input logic lock, input logic nc, output logic [63:0] rd, output logic err);
    @(negedge clk);
    ls_req_valid[t] = 1'b1;
    ls_req[t] = '{tid: 1'(t), sup: 1'b1, va: va, we: we, be: 8'hFF, wdata: wd, lock: lock, nc: nc};
    #1;
    while (!ls_req_ready[t]) begin @(negedge clk); #1; end
    @(negedge clk);
    ls_req_valid[t] = 1'b0;
    while (!ls_rsp_valid[t]) @(negedge clk);
    rd  = ls_rsp.rdata;
    err = ls_rsp.err;
  endtask

  task automatic ld(input int t, input logic [31:0] va, output logic [63:0] rd);
    logic e;
    ls(t, va, 1'b0, '0, 1'b0, 1'b0, rd, e);
    check(!e, "load without error");
  endtask

  task automatic st(input int t, input logic [31:0] va, input logic [63:0] wd);
    logic [63:0] d;
    logic e;
    ls(t, va, 1'b1, wd, 1'b0, 1'b0, d, e);
  endtask

  task automatic dbg(input logic tid, input ctrl_cmd_e c);
    @(negedge clk);
    dbg_cmd_valid = 1'b1; dbg_cmd_tid = tid; dbg_cmd = c;
    @(negedge clk);
    dbg_cmd_valid = 1'b0;
  endtask

  // ---------------- thread 1: the side-kick ----------------
  logic t1_quit = 1'b0;
  initial begin : thread1
    logic [63:0] cmd, x, y, sum;
    wait (rst_n);
    while (!thread_run[1]) @(negedge clk);
    n_start++;
    forever begin
      // spin loop: two instruction pairs and a load of the channel
      fetch(1, SPIN_PC);
      ld(1, CH, cmd);
      fetch(1, SPIN_PC + 8);
      if (cmd == 64'd2) begin              // trivial task: reply at once
        st(1, CH, 64'd0);
        st(1, CH + 16, 64'd1);
      end else if (cmd == 64'd1) begin     // even products
        st(1, CH, 64'd0);
        sum = '0;
        for (int i = 0; i < N; i += 2) begin
          fetch(1, WORK_PC + 32'(i * 4));
          ld(1, XV + 32'(i * 8), x);
          ld(1, YV + 32'(i * 8), y);
          sum += x * y;
        end
        st(1, CH + 8, sum);
        st(1, CH + 16, 64'd1);
      end else if (cmd == 64'd3) begin     // mutex increments
        st(1, CH, 64'd0);
        for (int i = 0; i < 50; i++) begin
          logic [63:0] v;
          logic e;
          fetch(1, WORK_PC + 32'h100 + 32'((i % 4) * 8));
          ls(1, MUTEX, 1'b0, '0, 1'b1, 1'b0, v, e);
          ls(1, MUTEX, 1'b1, v + 1, 1'b0, 1'b0, x, e);
        end
        st(1, CH + 16, 64'd1);
      end else if (cmd == 64'd5) begin     // straight-line code
        st(1, CH, 64'd0);
        for (int i = 0; i < 64; i++) fetch(1, 32'h0000_5000 + 32'(i * 8));
        st(1, CH + 16, 64'd1);
      end else if (cmd == 64'd4) begin
        t1_quit = 1'b1;
        st(1, CH, 64'd0);
      end
      if (t1_quit) break;
    end
  end

  // wait for thread 1 to raise the done flag, then clear it
  task automatic wait_done();
    logic [63:0] d;
    d = '0;
    while (d != 64'd1) begin
      fetch(0, MAIN_PC + 32'h40);
      ld(0, CH + 16, d);
    end
    st(0, CH + 16, 64'd0);
  endtask

  // ---------------- thread 0: main ----------------
  logic [63:0] ref_dot, v, x, y, sum0, part1;
  logic        e;
  int          t_start, rt;
  initial begin : thread0
    if_req_valid = '0; ls_req_valid = '0; ibuf_flush = '0;
    if_req[0] = '0; if_req[1] = '0; ls_req[0] = '0; ls_req[1] = '0;
    thread_error = '0; thread_bp = '0; retire = '0;
    dbg_cmd_valid = 1'b0; dbg_cmd_tid = 1'b0; dbg_cmd_all = 1'b0; dbg_cmd = CMD_NOP;
    dbg_rsp_ready = 1'b1; mmu_reg_we = 1'b0; mmu_reg_addr = '0; mmu_reg_wdata = '0; tlb_flush = 1'b0;
    // memory image: code, vectors and page tables (the boot loader's work)
    for (int i = 0; i < 65536; i++) mem.mem[i] = {32'h8000_0000 | 32'(i), 32'(i) ^ 32'h0102_0304};
    ref_dot = '0;
    for (int i = 0; i < N; i++) begin
      mem.mem[v2p(XV + 32'(i * 8))[18:3]] = 64'(i + 3);
      mem.mem[v2p(YV + 32'(i * 8))[18:3]] = 64'(2 * i + 1);
      ref_dot += 64'(i + 3) * 64'(2 * i + 1);
    end
    for (int i = 36'h10000 >> 3; i < 36'h12000 >> 3; i++) mem.mem[i] = '0;
    mem.mem[v2p(CH)[18:3]] = '0;
    mem.mem[v2p(CH + 16)[18:3]] = '0;
    mem.mem[v2p(MUTEX)[18:3]] = '0;
    mem.mem[36'h10000 >> 3][31:0]  = 32'h0000_1101;  // context 1 -> L1 table at 0x11000
    mem.mem[36'h11000 >> 3][63:32] = 32'h0000_1141;  // L1[0] -> L2 table at 0x11400
    mem.mem[36'h11400 >> 3][63:32] = 32'h0000_1181;  // L2[0] -> L3 table at 0x11800
    for (int p = 0; p < 32; p++) begin
      logic [35:0] a;
      logic [31:0] w;
      a = 36'h11800 + 36'(p * 4);
      // ACC = 3 (read/write/execute), page ROPAGE ACC = 0 (read only)
      w = ({8'h00, 24'h000040 + 24'(p)} << 8) | ((p == 32'h1E) ? 32'h02 : 32'h0E);
      if (a[2]) mem.mem[a[18:3]][31:0]  = w;
      else      mem.mem[a[18:3]][63:32] = w;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(thread_run == 2'b01 && thread_mode[1] == MODE_IDLE, "thread 0 runs, thread 1 waits");
    // MMU on: CTP = 0x10000, context 1
    @(negedge clk); mmu_reg_we = 1; mmu_reg_addr = 3'd1; mmu_reg_wdata = 32'h0000_1000;
    @(negedge clk); mmu_reg_addr = 3'd2; mmu_reg_wdata = 32'd1;
    @(negedge clk); mmu_reg_addr = 3'd0; mmu_reg_wdata = 32'd1;
    @(negedge clk); mmu_reg_we = 0;
    dbg(1'b1, CMD_START);
    @(negedge clk);
    check(thread_run == 2'b11, "thread 1 started");

    // round trips of a trivial task
    for (int k = 0; k < 4; k++) begin
      fetch(0, MAIN_PC);
      t_start = cyc;
      st(0, CH, 64'd2);
      wait_done();
      rt = cyc - t_start;
      $display("side-kick round trip %0d: %0d cycles", k, rt);
    end
    check(rt < 200, "round trip completes");

    // dot product
    fetch(0, MAIN_PC + 8);
    st(0, CH, 64'd1);
    sum0 = '0;
    for (int i = 1; i < N; i += 2) begin
      fetch(0, MAIN_PC + 32'h200 + 32'(i * 4));
      ld(0, XV + 32'(i * 8), x);
      ld(0, YV + 32'(i * 8), y);
      sum0 += x * y;
    end
    wait_done();
    ld(0, CH + 8, part1);
    check(sum0 + part1 == ref_dot, "dot product");
    $display("dot product %0d (reference %0d)", sum0 + part1, ref_dot);

    // both threads run straight-line code: the instruction cache is shared
    st(0, CH, 64'd5);
    for (int i = 0; i < 64; i++) fetch(0, 32'h0000_4000 + 32'(i * 8));
    wait_done();

    // mutex
    st(0, CH, 64'd3);
    for (int i = 0; i < 50; i++) begin
      fetch(0, MAIN_PC + 32'h100 + 32'((i % 4) * 8));
      ls(0, MUTEX, 1'b0, '0, 1'b1, 1'b0, v, e);
      ls(0, MUTEX, 1'b1, v + 1, 1'b0, 1'b0, x, e);
    end
    wait_done();
    ld(0, MUTEX, v);
    check(v == 64'd100, "mutex counter");
    $display("mutex counter %0d", v);

    // non-cacheable store and load; unmapped address
    ls(0, IOREG, 1'b1, 64'h0123_4567_89AB_CDEF, 1'b0, 1'b1, v, e);
    ls(0, IOREG, 1'b0, '0, 1'b0, 1'b1, v, e);
    check(!e && v == 64'h0123_4567_89AB_CDEF, "non-cacheable access");
    ls(0, 32'h00F0_0000, 1'b0, '0, 1'b0, 1'b0, v, e);
    check(e, "unmapped address faults");

    // the walks set the referenced and modified bits in the page tables
    check(pte_of(MUTEX)[6:5] == 2'b11, "R and M set for a written page");
    check(pte_of(SPIN_PC)[6:5] == 2'b01, "R set, M clear for a code page");
    // a store to a read-only page updates the cache but is refused by the MMU
    v = rd_pa(v2p(ROPAGE));
    st(0, ROPAGE, 64'h5555_AAAA_5555_AAAA);
    repeat (60) @(negedge clk);
    check(rd_pa(v2p(ROPAGE)) == v, "read-only page not written");

    // deactivate thread 1
    st(0, CH, 64'd4);
    wait (t1_quit);
    dbg(1'b1, CMD_STOP);
    while (!(dbg_rsp_valid && dbg_rsp_tid == 1'b1)) @(negedge clk);
    check(dbg_rsp_evt == EVT_STOPPED, "stopped event");
    @(negedge clk);
    check(thread_mode[1] == MODE_IDLE && thread_run == 2'b01, "thread 1 deactivated");
    if (thread_mode[1] == MODE_IDLE) n_stop++;

    // write-through: memory holds the stored values
    repeat (50) @(negedge clk);
    check(rd_pa(v2p(MUTEX)) == 64'd100, "counter written through");
    check(rd_pa(v2p(CH + 8)) == part1, "result written through");

    $display("mechanisms: ibuf_hit=%0d ic_hit=%0d ic_miss=%0d dc_hit=%0d dc_miss=%0d tlb_hit=%0d tlb_walk=%0d",
             n_ibuf_hit, n_ic_hit, n_ic_miss, n_dc_hit, n_dc_miss, n_tlb_hit, n_tlb_miss);
    $display("mechanisms: imux_both=%0d imiss_stall=%0d dmux_both=%0d miss_stall=%0d lock_block=%0d fault=%0d wr_err=%0d nc=%0d start=%0d stop=%0d",
             n_imux_both, n_imiss_stall, n_dmux_both, n_miss_stall, n_lock_block, n_fault, n_wr_err, n_nc, n_start, n_stop);
    check(n_ibuf_hit > 0, "instruction buffer hit");
    check(n_ic_hit > 0 && n_ic_miss > 0, "icache hit and miss");
    check(n_dc_hit > 0 && n_dc_miss > 0, "dcache hit and miss");
    check(n_tlb_hit > 0 && n_tlb_miss > 0, "TLB hit and walk");
    check(n_imiss_stall > 0, "fetch stalled behind the other thread's icache miss");
    check(n_dmux_both > 0, "dcache contention");
    check(n_miss_stall > 0, "stall behind the other thread's miss");
    check(n_lock_block > 0, "held off by the other thread's lock");
    check(n_fault > 0, "MMU fault");
    check(n_wr_err > 0, "write-through refused by the MMU");
    check(n_nc > 0, "non-cacheable access");
    check(n_start > 0 && n_stop > 0, "thread start and stop");
    $display("finished at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
