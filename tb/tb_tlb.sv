// tb_tlb: directed tests of the 256-entry 8-way translation buffer.
// Checked: 256 page entries (4 KB pages, all 32 sets full) all hit with the
// right physical address and access bits; a 257th entry replaces the oldest
// entry of its set only; a different context misses; a level-1 (16 MB) and
// a level-2 (256 KB) entry translate other addresses inside their region,
// taking the offset bits from the virtual address; the modified bit and
// level are returned; writing a page that is already mapped replaces its
// entry without disturbing the round-robin order; flush empties the buffer.
module tb_tlb;
  import dt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        flush, hit, wr;
  logic [31:0] lva, wva;
  logic [7:0]  lctx, wctx;
  logic [35:0] pa;
  logic [2:0]  acc, wacc;
  logic [1:0]  wlvl;
  logic [23:0] wppn;
  logic        lm, wm;
  logic [1:0]  llvl;

  tlb dut (.clk, .rst_n, .flush, .lk_va(lva), .lk_ctx(lctx), .lk_hit(hit), .lk_pa(pa), .lk_acc(acc),
           .lk_m(lm), .lk_lvl(llvl), .wr_en(wr), .wr_va(wva), .wr_ctx(wctx), .wr_lvl(wlvl),
           .wr_ppn(wppn), .wr_acc(wacc), .wr_m(wm));

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic put(input logic [31:0] va, input logic [7:0] ctx, input logic [1:0] lvl,
                     input logic [23:0] ppn, input logic [2:0] a);
    @(negedge clk);
    wr = 1'b1; wva = va; wctx = ctx; wlvl = lvl; wppn = ppn; wacc = a; wm = ppn[0];
    @(negedge clk);
    wr = 1'b0;
  endtask

  task automatic look(input logic [31:0] va, input logic [7:0] ctx, input logic exp_hit,
                      input logic [35:0] exp_pa, input string what);
    lva = va; lctx = ctx;
    #1;
    check(hit == exp_hit, what);
    if (exp_hit) check(pa == exp_pa, {what, " pa"});
  endtask

  function automatic logic [23:0] ppn_of(input int i);
    return 24'h100000 + 24'(i * 3);
  endfunction

  initial begin
    flush = 1'b0; wr = 1'b0; lva = '0; lctx = '0; wva = '0; wctx = '0; wlvl = '0; wppn = '0; wacc = '0; wm = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    look(32'h0000_1000, 8'd1, 1'b0, '0, "empty after reset");
    for (int i = 0; i < 256; i++) put(32'(i) << 12, 8'd1, 2'd3, ppn_of(i), 3'(i));
    for (int i = 0; i < 256; i++) begin
      look((32'(i) << 12) | 32'h0000_0ABC, 8'd1, 1'b1, {ppn_of(i), 12'hABC}, "page hit");
      check(acc == 3'(i), "access bits");
      check(lm == ppn_of(i)[0] && llvl == 2'd3, "modified bit and level");
    end
    // 257th entry in set 0 replaces the oldest (i = 0) only
    put(32'(256) << 12, 8'd1, 2'd3, 24'hABCDEF, 3'd0);
    look(32'h0000_0000, 8'd1, 1'b0, '0, "oldest replaced");
    look(32'(32) << 12, 8'd1, 1'b1, {ppn_of(32), 12'h000}, "rest of set kept");
    look(32'(256) << 12, 8'd1, 1'b1, {24'hABCDEF, 12'h000}, "new entry");
    look(32'(5) << 12, 8'd2, 1'b0, '0, "other context misses");
    // rewriting a mapped page replaces its entry: no way of the set is lost
    put(32'(33) << 12, 8'd1, 2'd3, 24'h123457, 3'd7);
    look(32'(33) << 12, 8'd1, 1'b1, {24'h123457, 12'h000}, "rewritten entry");
    check(lm && acc == 3'd7, "rewritten entry bits");
    for (int i = 64; i < 256; i += 32)
      look(32'(i + 1) << 12, 8'd1, 1'b1, {ppn_of(i + 1), 12'h000}, "set kept after rewrite");
    put(32'(257) << 12, 8'd1, 2'd3, 24'h222222, 3'd0);
    look(32'(1) << 12, 8'd1, 1'b0, '0, "round robin replaces the oldest");
    look(32'(33) << 12, 8'd1, 1'b1, {24'h123457, 12'h000}, "rewritten entry kept");
    // level 1 (16 MB) and level 2 (256 KB) entries, context 3
    put(32'h4500_0000, 8'd3, 2'd1, 24'hABC000, 3'd2);
    look(32'h45A0_0123, 8'd3, 1'b1, {12'hABC, 24'hA0_0123}, "16 MB region");
    look(32'h46A0_0123, 8'd3, 1'b0, '0, "outside 16 MB region");
    put(32'h8004_0000, 8'd3, 2'd2, 24'h777740, 3'd2);
    look(32'h8006_0ABC, 8'd3, 1'b1, {18'(24'h777740 >> 6), 18'h2_0ABC}, "256 KB segment");
    look(32'h8008_0ABC, 8'd3, 1'b0, '0, "outside 256 KB segment");
    @(negedge clk); flush = 1'b1; @(negedge clk); flush = 1'b0;
    look(32'(32) << 12, 8'd1, 1'b0, '0, "flushed");
    look(32'h45A0_0123, 8'd3, 1'b0, '0, "flushed region");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
