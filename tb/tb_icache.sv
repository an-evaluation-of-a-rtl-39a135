// tb_icache: the instruction cache at its full size (32 KB, 4-way, 64-byte
// lines) in front of a memory stand-in with a 22-cycle first-beat latency.
// A reference model of the cache (tags, valid bits, most-recently-used way,
// victim = first invalid way else the way after the MRU way) predicts hit or
// miss for every fetch. Checked: returned instruction pairs against memory,
// thread ids, hit latency of one cycle, miss latency of LAT + 11 cycles and
// exactly one line read per miss, hit/miss pulses, back-to-back hits at one
// per cycle, and an error from memory reported and not cached.
module tb_icache;
  import dt_pkg::*;
  localparam int LAT = 22;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     rv, rr, sv, mv, mr, msv, hitp, missp;
  ic_req_t  rq;
  ic_rsp_t  rs;
  mem_req_t mq;
  mem_rsp_t ms;
  logic     err_en = 1'b0;

  icache dut (.clk, .rst_n, .req_valid(rv), .req_ready(rr), .req(rq), .rsp_valid(sv), .rsp(rs),
              .m_req_valid(mv), .m_req_ready(mr), .m_req(mq), .m_rsp_valid(msv), .m_rsp(ms),
              .hit_pulse(hitp), .miss_pulse(missp));
  cache_mem_model #(.WORDS(65536), .LAT(LAT)) mem (.clk, .rst_n, .req_valid(mv), .req_ready(mr),
              .req(mq), .rsp_valid(msv), .rsp(ms), .err_va_hi(4'hF), .err_en(err_en));

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

  // reference cache
  logic        m_v   [4][128];
  logic [18:0] m_tag [4][128];
  int          m_mru [128];
  int exp_hits = 0, exp_misses = 0;

  function automatic logic ref_access(input logic [31:0] va, input logic fill);
    int s, v;
    s = int'(va[12:6]);
    for (int w = 0; w < 4; w++)
      if (m_v[w][s] && m_tag[w][s] == va[31:13]) begin
        m_mru[s] = w;
        return 1'b1;
      end
    if (fill) begin
      v = (m_mru[s] + 1) % 4;
      for (int w = 3; w >= 0; w--) if (!m_v[w][s]) v = w;
      m_v[v][s]   = 1'b1;
      m_tag[v][s] = va[31:13];
      m_mru[s]    = v;
    end
    return 1'b0;
  endfunction

  function automatic logic [63:0] memval(input logic [31:0] va);
    return mem.mem[va[18:3]];
  endfunction

  task automatic fetch(input logic [31:0] va, input logic tid, input logic exp_err);
    logic exp_hit;
    int   lat, lr;
    exp_hit = ref_access(va, !exp_err);
    if (exp_hit) exp_hits++; else exp_misses++;
    @(negedge clk);
    rv = 1'b1; rq.va = va; rq.tid = tid;
    #1;
    while (!rr) begin @(negedge clk); #1; end
    lr = mem.line_reads;
    @(negedge clk);
    rv = 1'b0;
    lat = 1;
    while (!sv) begin @(negedge clk); lat++; end
    check(rs.tid == tid && rs.err == exp_err, "thread id and error flag");
    if (!exp_err) check(rs.data == memval(va), "instruction pair");
    if (exp_hit) check(lat == 1, "hit latency 1");
    else begin
      check(lat == LAT + 11, "miss latency");
      check(mem.line_reads == lr + 1, "one line read per miss");
    end
  endtask

  int t0;
  initial begin
    rv = 1'b0; rq = '0;
    for (int s = 0; s < 128; s++) begin
      m_mru[s] = 0;
      for (int w = 0; w < 4; w++) m_v[w][s] = 1'b0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // random fetches: 6 lines per set over 8 sets gives hits, misses, evictions
    for (int i = 0; i < 1500; i++) begin
      logic [31:0] va;
      va = {13'({$urandom_range(0, 5)}), 7'({$urandom_range(0, 7)}), 3'({$urandom_range(0, 7)}), 3'b000};
      fetch(va, 1'($urandom_range(0, 1)), 1'b0);
    end
    @(negedge clk);
    check(hits == exp_hits && misses == exp_misses, "hit and miss counts");
    $display("hits=%0d misses=%0d", hits, misses);
    // back-to-back hits: 16 pairs of one line, valid held high
    fetch(32'h0004_0000, 1'b0, 1'b0);
    fetch(32'h0004_0040, 1'b0, 1'b0);
    @(negedge clk);
    t0 = $time;
    for (int k = 0; k < 16; k++) begin
      rv = 1'b1; rq.va = 32'h0004_0000 + 32'((k % 16) * 8); rq.tid = 1'b1;
      #1;
      check(rr, "ready every cycle on hits");
      @(negedge clk);
      check(sv && rs.data == memval(32'h0004_0000 + 32'((k % 16) * 8)), "streamed hit data");
    end
    rv = 1'b0;
    check(($time - t0) == 16 * 10, "one hit per cycle");
    // error line
    err_en = 1'b1;
    fetch(32'hF000_0000, 1'b0, 1'b1);
    err_en = 1'b0;
    check(ref_access(32'hF000_0000, 1'b0) == 1'b0, "ref: error line not cached");
    fetch(32'hF000_0000, 1'b0, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
