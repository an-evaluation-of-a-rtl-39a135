// tb_workloads: memory-system side of the evaluation kernels, run on the
// dual-threaded core at its full default size, first on thread 0 alone and
// then split across both threads in the side-kick style (thread 0 posts a
// command in a shared channel word, thread 1 spins on it, does its half and
// raises a done flag).
//
// As in tb_dual_thread_core, the two execution pipelines are modelled by
// testbench processes that do one instruction-pair fetch or one load/store
// at a time; a kernel's loop body is a few fetches (which hit in the
// instruction buffer after the first pass) plus its loads and stores. The
// system bus memory has a 30-cycle line fill. Translation is left off.
// Kernels, with 64-bit integers in place of double precision values:
//   dot product   two 1024-element vectors; thread 1 takes the even
//                 products, thread 0 the odd ones
//   daxpy         y = a*x + y on 1024 elements; thread 0 the first half,
//                 thread 1 the second
//   mem-copy      32 KB block; thread 0 copies the even double words,
//                 thread 1 the odd ones
//   mutexes       a counter incremented under the data cache lock, 1024
//                 times in all (the full 2^20 would take too long to
//                 simulate)
//   merge sort    1024 numbers; each thread sorts one half (bottom-up
//                 merge sort with a buffer), thread 0 merges the halves
//   matrix mult   32 x 32 matrices (the evaluated 128 x 128 would take too
//                 long to simulate); thread 1 the even rows, thread 0 the
//                 odd ones
//   FFT           4096 complex points, radix-2 butterflies in place, all
//                 twiddle factors 1 (a Walsh-Hadamard transform, which has
//                 the FFT's access pattern but needs no trigonometry); each
//                 thread transforms one 2048-point half, then thread 0 runs
//                 the last stage
//   Bellman-Ford  all-pairs shortest paths on a random 64-node, 128-edge
//                 graph, one Bellman-Ford run per source (each run stops
//                 after a round without change); thread 1 the even
//                 sources, thread 0 the odd ones. The distances are checked
//                 against Floyd-Warshall
// Vector, block, sort, FFT and graph sizes are the evaluated ones. Each result is checked
// against a value computed here; the cycle counts, the speed-up of the
// two-thread run and the data cache miss rate are printed, and the two-
// thread run of the dot product and of daxpy must be faster than the
// one-thread run. Each run uses fresh memory regions, so both start with
// cold lines.
module tb_workloads;
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
  sys_mem_model #(.WORDS(262144), .LAT(22), .WLAT(4)) mem (.clk, .rst_n, .req_valid(bus_req_valid),
      .req_ready(bus_req_ready), .req(bus_req), .rsp_valid(bus_rsp_valid), .rsp(bus_rsp));

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int cyc = 0, n_dc_hit = 0, n_dc_miss = 0;
  always @(posedge clk) begin
    cyc++;
    n_dc_hit  += int'(dcache_hit);
    n_dc_miss += int'(dcache_miss);
  end

  // ---------------- thread port tasks ----------------
  task automatic fetch(input int t, input logic [31:0] pc);
    @(negedge clk);
    if_req_valid[t] = 1'b1; if_req[t].va = pc; if_req[t].tid = 1'(t); if_req[t].sup = 1'b1;
    #1;
    while (!if_req_ready[t]) begin @(negedge clk); #1; end
    @(negedge clk);
    if_req_valid[t] = 1'b0;
    while (!if_rsp_valid[t]) @(negedge clk);
  endtask

  task automatic ls(input int t, input logic [31:0] va, input logic we, input logic [63:0] wd,
                    input logic lock, output logic [63:0] rd);
    @(negedge clk);
    ls_req_valid[t] = 1'b1;
    ls_req[t] = '{tid: 1'(t), sup: 1'b1, va: va, we: we, be: 8'hFF, wdata: wd, lock: lock, nc: 1'b0};
    #1;
    while (!ls_req_ready[t]) begin @(negedge clk); #1; end
    @(negedge clk);
    ls_req_valid[t] = 1'b0;
    while (!ls_rsp_valid[t]) @(negedge clk);
    rd = ls_rsp.rdata;
  endtask

  task automatic ld(input int t, input logic [31:0] va, output logic [63:0] rd);
    ls(t, va, 1'b0, '0, 1'b0, rd);
  endtask

  task automatic st(input int t, input logic [31:0] va, input logic [63:0] wd);
    logic [63:0] d;
    ls(t, va, 1'b1, wd, 1'b0, d);
  endtask

  // ---------------- kernels ----------------
  localparam logic [31:0] CH = 32'h0000_0800;   // +0 command, +8 result, +16 done
  localparam int N = 1024;
  localparam logic [63:0] A = 64'd3;
  logic [31:0] xb, yb, sb, db;                    // bases of the current run

  // sum of x[i]*y[i] for i = first, first+step, ...
  task automatic k_dot(input int t, input int first, input int step, output logic [63:0] sum);
    logic [63:0] x, y;
    sum = '0;
    for (int i = first; i < N; i += step) begin
      fetch(t, 32'h0000_1000 + 32'(t * 256));
      ld(t, xb + 32'(i * 8), x);
      ld(t, yb + 32'(i * 8), y);
      fetch(t, 32'h0000_1008 + 32'(t * 256));
      sum += x * y;
    end
  endtask

  task automatic k_daxpy(input int t, input int lo, input int hi);
    logic [63:0] x, y;
    for (int i = lo; i < hi; i++) begin
      fetch(t, 32'h0000_1040 + 32'(t * 256));
      ld(t, xb + 32'(i * 8), x);
      ld(t, yb + 32'(i * 8), y);
      fetch(t, 32'h0000_1048 + 32'(t * 256));
      st(t, yb + 32'(i * 8), A * x + y);
    end
  endtask

  task automatic k_copy(input int t, input int first, input int step);
    logic [63:0] v;
    for (int i = first; i < 4096; i += step) begin
      fetch(t, 32'h0000_1080 + 32'(t * 256));
      ld(t, sb + 32'(i * 8), v);
      st(t, db + 32'(i * 8), v);
    end
  endtask

  task automatic k_mutex(input int t, input int n);
    logic [63:0] v, d;
    for (int i = 0; i < n; i++) begin
      fetch(t, 32'h0000_10C0 + 32'(t * 256));
      ls(t, sb, 1'b0, '0, 1'b1, v);       // locked load
      ls(t, sb, 1'b1, v + 1, 1'b0, d);    // store, releases the lock
    end
  endtask

  // bottom-up merge sort of elements [lo, hi) of the array at sb, using the
  // same range of db as buffer; the sorted run ends up back at sb
  task automatic k_msort(input int t, input int lo, input int hi);
    logic [31:0] src, dst;
    logic [63:0] a, b;
    src = sb; dst = db;
    for (int w = 1; w < hi - lo; w *= 2) begin
      for (int i = lo; i < hi; i += 2 * w) begin
        int p, q, pe, qe;
        p = i; pe = (i + w < hi) ? i + w : hi;
        q = pe; qe = (i + 2 * w < hi) ? i + 2 * w : hi;
        if (p < pe) ld(t, src + 32'(p * 8), a);
        if (q < qe) ld(t, src + 32'(q * 8), b);
        for (int o = i; o < qe; o++) begin
          fetch(t, 32'h0000_1100 + 32'(t * 256));
          if (q >= qe || (p < pe && a <= b)) begin
            st(t, dst + 32'(o * 8), a);
            p++;
            if (p < pe) ld(t, src + 32'(p * 8), a);
          end else begin
            st(t, dst + 32'(o * 8), b);
            q++;
            if (q < qe) ld(t, src + 32'(q * 8), b);
          end
        end
      end
      {src, dst} = {dst, src};
    end
    if (src != sb)
      for (int i = lo; i < hi; i++) begin
        ld(t, src + 32'(i * 8), a);
        st(t, sb + 32'(i * 8), a);
      end
  endtask

  // final merge of the two sorted halves of sb into db
  task automatic k_merge(input int t, input int n);
    logic [63:0] a, b;
    int p, q;
    p = 0; q = n / 2;
    ld(t, sb, a);
    ld(t, sb + 32'(q * 8), b);
    for (int o = 0; o < n; o++) begin
      fetch(t, 32'h0000_1100 + 32'(t * 256));
      if (q >= n || (p < n / 2 && a <= b)) begin
        st(t, db + 32'(o * 8), a);
        p++;
        if (p < n / 2) ld(t, sb + 32'(p * 8), a);
      end else begin
        st(t, db + 32'(o * 8), b);
        q++;
        if (q < n) ld(t, sb + 32'(q * 8), b);
      end
    end
  endtask

  // C = A * B for MD x MD matrices at xb, yb, db, rows first, first+step, ...
  localparam int MD = 32;
  task automatic k_matmul(input int t, input int first, input int step);
    logic [63:0] a, b, c;
    for (int r = first; r < MD; r += step)
      for (int j = 0; j < MD; j++) begin
        c = '0;
        for (int k = 0; k < MD; k++) begin
          fetch(t, 32'h0000_1140 + 32'(t * 256));
          ld(t, xb + 32'((r * MD + k) * 8), a);
          ld(t, yb + 32'((k * MD + j) * 8), b);
          c += a * b;
        end
        st(t, db + 32'((r * MD + j) * 8), c);
      end
  endtask

  // Radix-2 butterflies over the 4096 complex points at sb (real part at
  // +16*p, imaginary part at +16*p+8): for each span s from s_lo up to (not
  // including) s_hi, every point p in [lo, lo+n) with bit s clear is combined
  // with point p+s into (a+b, a-b). Twiddle factors are all 1, which turns the
  // FFT into a Walsh-Hadamard transform with the same memory access pattern.
  localparam int NF = 4096;
  task automatic k_fft(input int t, input int lo, input int n, input int s_lo, input int s_hi);
    logic [63:0] ar, ai, br, bi;
    for (int s = s_lo; s < s_hi; s *= 2)
      for (int p = lo; p < lo + n; p++)
        if ((p & s) == 0) begin
          fetch(t, 32'h0000_1180 + 32'(t * 256));
          ld(t, sb + 32'(p * 16), ar);
          ld(t, sb + 32'(p * 16 + 8), ai);
          ld(t, sb + 32'((p + s) * 16), br);
          ld(t, sb + 32'((p + s) * 16 + 8), bi);
          fetch(t, 32'h0000_1188 + 32'(t * 256));
          st(t, sb + 32'(p * 16), ar + br);
          st(t, sb + 32'(p * 16 + 8), ai + bi);
          st(t, sb + 32'((p + s) * 16), ar - br);
          st(t, sb + 32'((p + s) * 16 + 8), ai - bi);
        end
  endtask

  // Bellman-Ford from sources first, first+step, ...: edge e is three words
  // at xb + 24*e (from, to, weight), and the distances from source src are
  // row src of a 64 x 64 matrix at db. Rounds of relaxation over all edges
  // stop after a round that changes nothing.
  localparam int NV = 64, NE = 128;
  localparam logic [63:0] INF = 64'h0000_0100_0000_0000;
  task automatic k_bford(input int t, input int first, input int step);
    logic [63:0] u, v, w, du, dv, d;
    logic changed;
    for (int src = first; src < NV; src += step) begin
      for (int i = 0; i < NV; i++)
        st(t, db + 32'((src * NV + i) * 8), i == src ? 64'd0 : INF);
      changed = 1'b1;
      for (int round = 0; round < NV - 1 && changed; round++) begin
        changed = 1'b0;
        for (int e = 0; e < NE; e++) begin
          fetch(t, 32'h0000_11C0 + 32'(t * 256));
          ld(t, xb + 32'(e * 24), u);
          ld(t, xb + 32'(e * 24 + 8), v);
          ld(t, xb + 32'(e * 24 + 16), w);
          fetch(t, 32'h0000_11C8 + 32'(t * 256));
          ld(t, db + 32'((src * NV + 32'(u)) * 8), du);
          ld(t, db + 32'((src * NV + 32'(v)) * 8), dv);
          if (du + w < dv) begin
            st(t, db + 32'((src * NV + 32'(v)) * 8), du + w);
            changed = 1'b1;
          end
        end
      end
    end
  endtask

  // ---------------- thread 1: side-kick ----------------
  logic [63:0] part1;
  initial begin : thread1
    logic [63:0] cmd;
    wait (rst_n);
    while (!thread_run[1]) @(negedge clk);
    forever begin
      fetch(1, 32'h0000_2000);
      ld(1, CH, cmd);
      if (cmd != 0) begin
        st(1, CH, 64'd0);
        case (cmd)
          64'd1: k_dot(1, 0, 2, part1);
          64'd2: k_daxpy(1, N / 2, N);
          64'd3: k_copy(1, 1, 2);
          64'd4: k_mutex(1, 512);
          64'd5: k_msort(1, 0, 512);
          64'd6: k_matmul(1, 0, 2);
          64'd7: k_fft(1, 0, NF / 2, 1, NF / 2);
          default: k_bford(1, 0, 2);
        endcase
        st(1, CH + 16, 64'd1);
      end
    end
  end

  task automatic post(input logic [63:0] c);
    st(0, CH, c);
  endtask

  task automatic wait_done();
    logic [63:0] d;
    d = '0;
    while (d != 64'd1) begin
      fetch(0, 32'h0000_3000);
      ld(0, CH + 16, d);
    end
    st(0, CH + 16, 64'd0);
  endtask

  // data for one run in region r (each region 96 KB: x, y at +0/+8K, source
  // and destination blocks at +16K/+48K)
  localparam int NK = 8;
  logic [63:0] fw [NV][NV];              // all-pairs distances, Floyd-Warshall
  logic [63:0] ref_dot;
  logic [63:0] sort_ref [$];
  task automatic setup(input int r);
    logic [31:0] base;
    base = 32'h0001_0000 + 32'(r) * 32'h0001_8000;
    xb = base; yb = base + 32'h2000; sb = base + 32'h4000; db = base + 32'hC000;
    ref_dot = '0;
    for (int i = 0; i < N; i++) begin
      mem.mem[(xb >> 3) + 32'(i)] = 64'(i * 7 + r);
      mem.mem[(yb >> 3) + 32'(i)] = 64'(3 * i + 11);
      ref_dot += 64'(i * 7 + r) * 64'(3 * i + 11);
    end
    for (int i = 0; i < 4096; i++) begin
      mem.mem[(sb >> 3) + 32'(i)] = {32'(r), 32'(i) ^ 32'h5A5A_0000};
      mem.mem[(db >> 3) + 32'(i)] = '0;
    end
    if (r % NK == 3) mem.mem[sb >> 3] = '0;   // mutex counter
    if (r % NK == 4) begin                    // numbers to sort
      sort_ref.delete();
      for (int i = 0; i < 1024; i++) begin
        logic [63:0] v;
        v = 64'($urandom_range(0, 100000));
        mem.mem[(sb >> 3) + 32'(i)] = v;
        sort_ref.push_back(v);
      end
      sort_ref.sort();
    end
    if (r % NK == 6)                         // FFT input points
      for (int p = 0; p < NF; p++) begin
        mem.mem[(sb >> 3) + 32'(2 * p)]     = 64'(p * 3 + r);
        mem.mem[(sb >> 3) + 32'(2 * p + 1)] = 64'(p ^ 85);
      end
    if (r % NK == 7) begin                   // random graph and its distances
      for (int i = 0; i < NV; i++)
        for (int j = 0; j < NV; j++) fw[i][j] = i == j ? 64'd0 : INF;
      for (int e = 0; e < NE; e++) begin
        int u, v, w;
        u = $urandom_range(0, NV - 1); v = $urandom_range(0, NV - 1); w = $urandom_range(1, 20);
        mem.mem[(xb >> 3) + 32'(3 * e)]     = 64'(u);
        mem.mem[(xb >> 3) + 32'(3 * e + 1)] = 64'(v);
        mem.mem[(xb >> 3) + 32'(3 * e + 2)] = 64'(w);
        if (64'(w) < fw[u][v]) fw[u][v] = 64'(w);
      end
      for (int k = 0; k < NV; k++)
        for (int i = 0; i < NV; i++)
          for (int j = 0; j < NV; j++)
            if (fw[i][k] + fw[k][j] < fw[i][j]) fw[i][j] = fw[i][k] + fw[k][j];
    end
  endtask

  int c_single [NK], c_dual [NK];
  int h0, m0;
  logic [63:0] s0, v;
  initial begin : thread0
    if_req_valid = '0; ls_req_valid = '0; ibuf_flush = '0;
    if_req[0] = '0; if_req[1] = '0; ls_req[0] = '0; ls_req[1] = '0;
    thread_error = '0; thread_bp = '0; retire = '0;
    dbg_cmd_valid = 1'b0; dbg_cmd_tid = 1'b0; dbg_cmd_all = 1'b0; dbg_cmd = CMD_NOP;
    dbg_rsp_ready = 1'b1; mmu_reg_we = 1'b0; mmu_reg_addr = '0; mmu_reg_wdata = '0; tlb_flush = 1'b0;
    for (int i = 0; i < 262144; i++) mem.mem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int dual = 0; dual < 2; dual++) begin
      if (dual == 1) begin
        @(negedge clk); dbg_cmd_valid = 1'b1; dbg_cmd_tid = 1'b1; dbg_cmd = CMD_START;
        @(negedge clk); dbg_cmd_valid = 1'b0;
      end
      for (int k = 0; k < NK; k++) begin
        int t0;
        logic [63:0] ex;
        setup(dual * NK + k);
        h0 = n_dc_hit; m0 = n_dc_miss;
        t0 = cyc;
        case (k)
          0: begin
            if (dual == 1) begin post(64'd1); k_dot(0, 1, 2, s0); wait_done(); s0 += part1; end
            else k_dot(0, 0, 1, s0);
            check(s0 == ref_dot, "dot product");
          end
          1: begin
            if (dual == 1) begin post(64'd2); k_daxpy(0, 0, N / 2); wait_done(); end
            else k_daxpy(0, 0, N);
          end
          2: begin
            if (dual == 1) begin post(64'd3); k_copy(0, 0, 2); wait_done(); end
            else k_copy(0, 0, 1);
          end
          3: begin
            if (dual == 1) begin post(64'd4); k_mutex(0, 512); wait_done(); end
            else k_mutex(0, 1024);
            ld(0, sb, v);
            check(v == 64'd1024, "mutex counter");
          end
          4: begin
            if (dual == 1) begin post(64'd5); k_msort(0, 512, 1024); wait_done(); end
            else k_msort(0, 0, 512);
            if (dual == 1) k_merge(0, 1024);
            else begin k_msort(0, 512, 1024); k_merge(0, 1024); end
          end
          5: begin
            if (dual == 1) begin post(64'd6); k_matmul(0, 1, 2); wait_done(); end
            else k_matmul(0, 0, 1);
          end
          7: begin
            if (dual == 1) begin post(64'd8); k_bford(0, 1, 2); wait_done(); end
            else k_bford(0, 0, 1);
          end
          default: begin
            // each thread transforms one 2048-point half; thread 0 then
            // does the last stage, which joins the halves
            if (dual == 1) begin post(64'd7); k_fft(0, NF / 2, NF / 2, 1, NF / 2); wait_done(); end
            else k_fft(0, 0, NF, 1, NF / 2);
            k_fft(0, 0, NF, NF / 2, NF);
          end
        endcase
        if (dual == 1) c_dual[k] = cyc - t0; else c_single[k] = cyc - t0;
        $display("%s kernel %0d: %0d cycles, dcache miss rate %0d.%0d%%", dual ? "two threads" : "one thread ",
                 k, cyc - t0, (n_dc_miss - m0) * 100 / (n_dc_hit + n_dc_miss - h0 - m0),
                 (n_dc_miss - m0) * 1000 / (n_dc_hit + n_dc_miss - h0 - m0) % 10);
        // results written through to memory
        repeat (40) @(negedge clk);
        if (k == 1)
          for (int i = 0; i < N; i++) begin
            ex = A * mem.mem[(xb >> 3) + 32'(i)] + 64'(3 * i + 11);
            check(mem.mem[(yb >> 3) + 32'(i)] == ex, "daxpy result");
          end
        if (k == 2)
          for (int i = 0; i < 4096; i++)
            check(mem.mem[(db >> 3) + 32'(i)] == mem.mem[(sb >> 3) + 32'(i)], "copied word");
        if (k == 4)
          for (int i = 0; i < 1024; i++)
            check(mem.mem[(db >> 3) + 32'(i)] == sort_ref[i], "sorted element");
        if (k == 5)
          for (int r = 0; r < MD; r++)
            for (int j = 0; j < MD; j++) begin
              ex = '0;
              for (int q = 0; q < MD; q++)
                ex += mem.mem[(xb >> 3) + 32'(r * MD + q)] * mem.mem[(yb >> 3) + 32'(q * MD + j)];
              check(mem.mem[(db >> 3) + 32'(r * MD + j)] == ex, "matrix element");
            end
        // output k of the transform is the sum over inputs p of
        // (-1)^popcount(p & k) * x[p]; checked for every 16th k
        if (k == 7)
          for (int i = 0; i < NV; i++)
            for (int j = 0; j < NV; j++)
              check(mem.mem[(db >> 3) + 32'(i * NV + j)] == fw[i][j], "shortest distance");
        if (k == 6)
          for (int q = 0; q < NF; q += 16) begin
            logic [63:0] er, ei;
            er = '0; ei = '0;
            for (int p = 0; p < NF; p++)
              if ($countones(p & q) % 2 == 0) begin
                er += 64'(p * 3 + dual * NK + k); ei += 64'(p ^ 85);
              end else begin
                er -= 64'(p * 3 + dual * NK + k); ei -= 64'(p ^ 85);
              end
            check(mem.mem[(sb >> 3) + 32'(2 * q)] == er, "transform real part");
            check(mem.mem[(sb >> 3) + 32'(2 * q + 1)] == ei, "transform imaginary part");
          end
      end
    end
    for (int k = 0; k < NK; k++)
      $display("kernel %0d speed-up with two threads: %0d.%02d", k, c_single[k] / c_dual[k],
               (c_single[k] * 100 / c_dual[k]) % 100);
    check(c_dual[0] < c_single[0], "dot product faster on two threads");
    check(c_dual[1] < c_single[1], "daxpy faster on two threads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
