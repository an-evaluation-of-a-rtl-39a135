// tb_mmu: the MMU with its TLB and a system bus memory model. Page tables in
// the SPARC V8 reference-MMU format are placed in memory by the testbench.
// Checked: with translation off, line reads, single reads and writes go to
// the same physical address; with translation on, a 4 KB page reached
// through context table, level-1, level-2 and level-3 tables, and a 16 MB
// level-1 page, translate to the expected physical addresses; the first
// access walks (4 or 2 table reads) and the next hits in the TLB (no table
// read); an invalid entry gives an error response and sets the fault status
// (FT = 1, level) and fault address registers; requests of both caches
// arriving together are both served, one after the other; the walk sets the
// referenced bit in the PTE and, on the first store to a page (also when
// the page is in the TLB but still clean), the modified bit; stores to a
// read-only page, user accesses to supervisor pages and fetches from a
// non-executable page are refused with the fault type and access type the
// reference MMU defines.
module tb_mmu;
  import dt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     icv, icr, icsv, dcv, dcr, dcsv, bv, br, bsv, rwe, tflush, th, tm, flt;
  mem_req_t icq, dcq;
  mem_rsp_t ics, dcs;
  bus_req_t bq;
  bus_rsp_t bs;
  logic [2:0]  ra;
  logic [31:0] rwd, rrd;

  mmu dut (.clk, .rst_n, .ic_req_valid(icv), .ic_req_ready(icr), .ic_req(icq), .ic_rsp_valid(icsv),
           .ic_rsp(ics), .dc_req_valid(dcv), .dc_req_ready(dcr), .dc_req(dcq), .dc_rsp_valid(dcsv),
           .dc_rsp(dcs), .bus_req_valid(bv), .bus_req_ready(br), .bus_req(bq), .bus_rsp_valid(bsv),
           .bus_rsp(bs), .reg_we(rwe), .reg_addr(ra), .reg_wdata(rwd), .reg_rdata(rrd),
           .tlb_flush(tflush), .tlb_hit_pulse(th), .tlb_miss_pulse(tm), .fault_pulse(flt));
  sys_mem_model #(.WORDS(65536), .LAT(22)) mem (.clk, .rst_n, .req_valid(bv), .req_ready(br),
           .req(bq), .rsp_valid(bsv), .rsp(bs));

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int tlb_misses = 0, tlb_hits = 0, faults = 0;
  always @(posedge clk) begin
    if (tm) tlb_misses++;
    if (th) tlb_hits++;
    if (flt) faults++;
  end

  function automatic logic [63:0] pat(input int i);
    return {32'hBEEF_0000 | 32'(i), 32'(i) * 32'h0101_0101};
  endfunction

  task automatic put32(input logic [35:0] pa, input logic [31:0] w);
    if (pa[2]) mem.mem[pa[18:3]][31:0] = w;
    else       mem.mem[pa[18:3]][63:32] = w;
  endtask

  task automatic wreg(input logic [2:0] a, input logic [31:0] d);
    @(negedge clk); rwe = 1'b1; ra = a; rwd = d;
    @(negedge clk); rwe = 1'b0;
  endtask

  // one transfer on a cache port; collects the responses
  task automatic xfer(input logic port, input mem_req_t r, output logic [63:0] d [8],
                      output int n, output logic err);
    @(negedge clk);
    if (port) begin dcv = 1'b1; dcq = r; end else begin icv = 1'b1; icq = r; end
    #1;
    while (!(port ? dcr : icr)) begin @(negedge clk); #1; end
    @(negedge clk);
    if (port) dcv = 1'b0; else icv = 1'b0;
    n = 0; err = 1'b0;
    forever begin
      if (port ? dcsv : icsv) begin
        mem_rsp_t s;
        s = port ? dcs : ics;
        d[n[2:0]] = s.rdata;
        n++;
        err = err | s.err;
        if (s.last) break;
      end
      @(negedge clk);
    end
  endtask

  function automatic mem_req_t line_rd(input logic [31:0] va);
    mem_req_t r;
    r = '0; r.va = va; r.line = 1'b1;
    return r;
  endfunction

  logic [63:0] d [8];
  logic [63:0] d2 [8];
  int n, n2, rd0;
  logic e, e2;
  initial begin
    icv = 1'b0; dcv = 1'b0; icq = '0; dcq = '0; rwe = 1'b0; ra = '0; rwd = '0; tflush = 1'b0;
    for (int i = 0; i < 65536; i++) mem.mem[i] = pat(i);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // translation off
    xfer(1'b0, line_rd(32'h0000_1000), d, n, e);
    check(n == 8 && !e, "8 beats");
    for (int k = 0; k < 8; k++) check(d[k] == pat(32'h1000 / 8 + k), "line read, no translation");
    begin
      mem_req_t w;
      w = '0; w.va = 32'h0000_2008; w.we = 1'b1; w.be = 8'h0F; w.wdata = 64'h1111_2222_3333_4444;
      xfer(1'b1, w, d, n, e);
      check(n == 1 && !e, "one write acknowledge");
      check(mem.mem[32'h2008 / 8] == {pat(32'h2008 / 8)[63:32], 32'h3333_4444}, "write with byte enables");
    end
    // page tables: context table at 0x10000, context 1
    put32(36'h10004, 32'h0000_1101);   // ctx 1 -> L1 table at 0x11000
    put32(36'h11000, 32'h0000_1141);   // L1[0] -> L2 table at 0x11400
    put32(36'h11004, 32'h0000_0002);   // L1[1] -> 16 MB page at PA 0
    put32(36'h11008, 32'h0000_0000);   // L1[2] invalid
    put32(36'h11404, 32'h0000_1151);   // L2[1] -> L3 table at 0x11500
    put32(36'h1150C, 32'h0000_080E);   // L3[3] -> 4 KB page at PA 0x8000
    wreg(3'd1, 32'h0000_1000);         // CTPR = 0x10000 >> 6 << 2
    wreg(3'd2, 32'd1);                 // context 1
    wreg(3'd0, 32'd1);                 // enable
    check(rrd == 32'd1, "control register read");
    rd0 = mem.reads;
    xfer(1'b0, line_rd(32'h0004_3040), d, n, e);
    check(mem.reads == rd0 + 4, "four-level walk");
    for (int k = 0; k < 8; k++) check(d[k] == pat(32'h8040 / 8 + k), "4 KB page translated");
    rd0 = mem.reads;
    xfer(1'b1, line_rd(32'h0004_3FC0), d, n, e);
    check(mem.reads == rd0, "TLB hit, no walk");
    for (int k = 0; k < 8; k++) check(d[k] == pat(32'h8FC0 / 8 + k), "second line of the page");
    rd0 = mem.reads;
    begin
      mem_req_t r;
      r = '0; r.va = 32'h0100_4008;
      xfer(1'b1, r, d, n, e);
      check(n == 1 && d[0] == pat(32'h4008 / 8), "16 MB page, single read");
      check(mem.reads == rd0 + 3, "two-level walk plus the read");
    end
    // invalid entry
    xfer(1'b1, line_rd(32'h0200_0000), d, n, e);
    check(n == 1 && e, "fault response");
    ra = 3'd3; #1;
    check(rrd[4:2] == 3'd1 && rrd[9:8] == 2'd1 && rrd[1], "fault status");
    ra = 3'd4; #1;
    check(rrd == 32'h0200_0000, "fault address");
    @(negedge clk);
    check(faults == 1, "one fault");
    // both caches at once
    fork
      xfer(1'b0, line_rd(32'h0004_3000), d, n, e);
      xfer(1'b1, line_rd(32'h0004_3080), d2, n2, e2);
    join
    check(n == 8 && n2 == 8 && !e && !e2, "both served");
    check(d[0] == pat(32'h8000 / 8) && d2[0] == pat(32'h8080 / 8), "both translated");
    // flush
    @(negedge clk); tflush = 1'b1; @(negedge clk); tflush = 1'b0;
    rd0 = mem.reads;
    xfer(1'b0, line_rd(32'h0004_3000), d, n, e);
    check(mem.reads == rd0 + 4, "walk again after flush");
    check(tlb_misses == 4 && tlb_hits >= 5, "TLB hit/miss pulses");
    // referenced and modified bits
    check(mem.mem[36'h11508 >> 3][31:0] == 32'h0000_082E, "R set in the PTE, M clear");
    begin
      mem_req_t w;
      int wr0, m0;
      w = '0; w.va = 32'h0004_3010; w.we = 1'b1; w.be = 8'hFF; w.wdata = 64'hFEED_F00D_0000_0001;
      wr0 = mem.writes; m0 = tlb_misses;
      xfer(1'b1, w, d, n, e);
      check(!e && mem.mem[32'h8010 / 8] == 64'hFEED_F00D_0000_0001, "store to a clean page");
      check(tlb_misses == m0 + 1 && mem.writes == wr0 + 2, "walk writes the PTE back, then the store");
      check(mem.mem[36'h11508 >> 3][31:0] == 32'h0000_086E, "M set in the PTE");
      w.wdata = 64'h2;
      xfer(1'b1, w, d, n, e);
      check(tlb_misses == m0 + 1 && mem.writes == wr0 + 3, "second store hits the TLB");
    end
    // access permissions
    put32(36'h11510, 32'h0000_0902);   // L3[4] -> PA 0x9000, read only
    put32(36'h11514, 32'h0000_0A1A);   // L3[5] -> PA 0xA000, supervisor read/execute
    begin
      mem_req_t w;
      logic [63:0] old;
      old = mem.mem[32'h9000 / 8];
      w = '0; w.va = 32'h0004_4000; w.we = 1'b1; w.be = 8'hFF; w.wdata = '1;
      xfer(1'b1, w, d, n, e);
      check(e && mem.mem[32'h9000 / 8] == old, "store to a read-only page refused");
      ra = 3'd3; #1;
      check(rrd[4:2] == 3'd2 && rrd[7:5] == 3'd4 && rrd[9:8] == 2'd3, "protection error, user store, level 3");
      w = '0; w.va = 32'h0004_4008;
      xfer(1'b1, w, d, n, e);
      check(!e && d[0] == pat(32'h9008 / 8), "load from a read-only page");
      xfer(1'b1, w, d, n, e);
      check(!e && d[0] == pat(32'h9008 / 8), "again, from the TLB");
      w.we = 1'b1; w.wdata = '1;
      xfer(1'b1, w, d, n, e);
      check(e && mem.mem[32'h9008 / 8] == pat(32'h9008 / 8), "store refused on a TLB hit");
      w = '0; w.va = 32'h0004_5000;
      xfer(1'b1, w, d, n, e);
      check(e, "user load from a supervisor page");
      ra = 3'd3; #1;
      check(rrd[4:2] == 3'd3 && rrd[7:5] == 3'd0, "privilege violation, user data load");
      w.sup = 1'b1;
      xfer(1'b1, w, d, n, e);
      check(!e && d[0] == pat(32'hA000 / 8), "supervisor load");
      w = line_rd(32'h0004_5040); w.sup = 1'b1;
      xfer(1'b0, w, d, n, e);
      check(!e && n == 8 && d[0] == pat(32'hA040 / 8), "supervisor fetch");
      w.sup = 1'b0;
      xfer(1'b0, w, d, n, e);
      check(e && n == 1, "user fetch from a supervisor page");
      ra = 3'd3; #1;
      check(rrd[4:2] == 3'd3 && rrd[7:5] == 3'd2, "privilege violation, user instruction");
      w = line_rd(32'h0100_5000); w.sup = 1'b1;
      xfer(1'b0, w, d, n, e);
      check(e, "fetch from a read-only region");
      ra = 3'd3; #1;
      check(rrd[4:2] == 3'd2 && rrd[7:5] == 3'd3, "protection error, supervisor instruction");
    end
    $display("tlb hits=%0d misses=%0d", tlb_hits, tlb_misses);
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
