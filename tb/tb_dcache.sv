// tb_dcache: the data cache at its full size (32 KB, 4-way, 64-byte lines)
// in front of a memory stand-in with a 22-cycle latency. Random loads and
// stores (random byte enables) from two thread ids, plus non-cacheable
// accesses, over 6 lines per set in 8 sets. A byte-exact shadow memory gives
// every expected load value; a reference model of the tags (NMRU victim,
// write-allocate, non-cacheable accesses never allocate) predicts hits and
// misses. Checked: load data, one-cycle load hits, hit/miss pulse counts,
// write-through (every store reaches memory, and memory equals the shadow
// at the end), and that a load issued by the other thread in the cycle right
// after a store hit already sees the stored bytes.
module tb_dcache;
  import dt_pkg::*;
  localparam int LAT = 22;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     rv, rr, sv, mv, mr, msv, hitp, missp, werr;
  dc_req_t  rq;
  dc_rsp_t  rs;
  mem_req_t mq;
  mem_rsp_t ms;

  dcache dut (.clk, .rst_n, .req_valid(rv), .req_ready(rr), .req(rq), .rsp_valid(sv), .rsp(rs),
              .m_req_valid(mv), .m_req_ready(mr), .m_req(mq), .m_rsp_valid(msv), .m_rsp(ms),
              .hit_pulse(hitp), .miss_pulse(missp), .wr_err_pulse(werr));
  cache_mem_model #(.WORDS(65536), .LAT(LAT)) mem (.clk, .rst_n, .req_valid(mv), .req_ready(mr),
              .req(mq), .rsp_valid(msv), .rsp(ms), .err_va_hi(4'hF), .err_en(1'b0));

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int hits = 0, misses = 0;
  always @(posedge clk) begin
    if (hitp) hits++;
    if (missp) misses++;
  end

  logic [63:0] shadow [65536];
  logic        m_v   [4][128];
  logic [18:0] m_tag [4][128];
  int          m_mru [128];
  int exp_hits = 0, exp_misses = 0, stores = 0;

  function automatic logic ref_access(input logic [31:0] va);
    int s, v;
    s = int'(va[12:6]);
    for (int w = 0; w < 4; w++)
      if (m_v[w][s] && m_tag[w][s] == va[31:13]) begin
        m_mru[s] = w;
        return 1'b1;
      end
    v = (m_mru[s] + 1) % 4;
    for (int w = 3; w >= 0; w--) if (!m_v[w][s]) v = w;
    m_v[v][s]   = 1'b1;
    m_tag[v][s] = va[31:13];
    m_mru[s]    = v;
    return 1'b0;
  endfunction

  function automatic logic [63:0] merge(input logic [63:0] o, input logic [63:0] n, input logic [7:0] be);
    for (int b = 0; b < 8; b++) if (be[b]) o[8*b +: 8] = n[8*b +: 8];
    return o;
  endfunction

  task automatic access(input logic [31:0] va, input logic we, input logic [7:0] be,
                        input logic [63:0] wd, input logic nc, input logic tid);
    logic exp_hit;
    logic [63:0] exp_d;
    int lat;
    exp_hit = nc ? 1'b0 : ref_access(va);
    if (!nc) begin
      if (exp_hit) exp_hits++; else exp_misses++;
    end
    exp_d = shadow[va[18:3]];
    if (we) begin
      shadow[va[18:3]] = merge(shadow[va[18:3]], wd, be);
      stores++;
    end
    @(negedge clk);
    rv = 1'b1; rq = '{tid: tid, sup: 1'b0, va: va, we: we, be: be, wdata: wd, lock: 1'b0, nc: nc};
    #1;
    while (!rr) begin @(negedge clk); #1; end
    @(negedge clk);
    rv = 1'b0;
    lat = 1;
    while (!sv) begin @(negedge clk); lat++; end
    check(rs.tid == tid && !rs.err, "thread id");
    if (!we) check(rs.rdata == exp_d, "load data");
    if (!we && rs.rdata != exp_d) $display("  va=%h nc=%0d hit=%0d lat=%0d exp=%h got=%h", va, nc, exp_hit, lat, exp_d, rs.rdata);
    if (!we && exp_hit) check(lat == 1, "load hit latency 1");
    if (!exp_hit && !(nc && we)) check(lat > LAT, "miss goes to memory");
  endtask

  initial begin
    rv = 1'b0; rq = '0;
    for (int i = 0; i < 65536; i++) shadow[i] = mem.mem[i];
    for (int s = 0; s < 128; s++) begin
      m_mru[s] = 0;
      for (int w = 0; w < 4; w++) m_v[w][s] = 1'b0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2500; i++) begin
      logic [31:0] va;
      logic we, nc;
      va = {13'({$urandom_range(0, 5)}), 7'({$urandom_range(0, 7)}), 3'({$urandom_range(0, 7)}), 3'b000};
      we = $urandom_range(0, 2) == 0;
      nc = $urandom_range(0, 19) == 0;
      if (nc) va = 32'h0004_0000 | (va & 32'h0000_03F8);  // I/O region, never cached
      access(va, we, 8'($urandom()), {$urandom(), $urandom()}, nc, 1'($urandom_range(0, 1)));
    end
    @(negedge clk);
    check(hits == exp_hits && misses == exp_misses, "hit and miss counts");
    $display("hits=%0d misses=%0d stores=%0d", hits, misses, stores);
    // store by thread 0 then load by thread 1 in the next cycle, same word
    for (int k = 0; k < 8; k++) begin
      logic [31:0] va;
      logic [63:0] d;
      va = 32'h0000_0040 + 32'(k * 8);
      access(va, 1'b0, 8'h00, '0, 1'b0, 1'b0);   // make sure the line is present
      repeat (120) @(negedge clk);                // and the write queue has room
      d = {$urandom(), $urandom()};
      shadow[va[18:3]] = merge(shadow[va[18:3]], d, 8'hF0);
      stores++;
      @(negedge clk);
      rv = 1'b1; rq = '{tid: 1'b0, sup: 1'b0, va: va, we: 1'b1, be: 8'hF0, wdata: d, lock: 1'b0, nc: 1'b0};
      #1;
      while (!rr) begin @(negedge clk); #1; end
      @(negedge clk);
      rv = 1'b1; rq = '{tid: 1'b1, sup: 1'b0, va: va, we: 1'b0, be: 8'h00, wdata: '0, lock: 1'b0, nc: 1'b0};
      #1;
      check(sv && rs.tid == 1'b0, "store acknowledged in one cycle");
      check(rr, "load accepted right after the store");
      @(negedge clk);
      rv = 1'b0;
      check(sv && rs.tid == 1'b1 && rs.rdata == shadow[va[18:3]], "store visible one cycle later");
    end
    // let the write queue drain, then memory must equal the shadow
    repeat (400) @(negedge clk);
    check(mem.writes == stores, "every store written through");
    begin
      int bad = 0;
      for (int i = 0; i < 65536; i++) if (mem.mem[i] != shadow[i]) bad++;
      check(bad == 0, "memory equals shadow");
    end
    $display("memory writes=%0d", mem.writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
