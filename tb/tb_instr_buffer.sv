// tb_instr_buffer: one thread fetching through the instruction buffer in front
// of a cache stand-in that answers after 2..6 cycles with data derived from
// the address. A reference model of the direct-mapped buffer (64 pairs =
// 128 instructions) predicts hit or miss for every fetch. Checked: the data
// and thread id returned, a hit answers one cycle after acceptance and makes
// no cache access, a miss goes to the cache, a spin loop of 4 pairs runs
// entirely from the buffer after its first pass, `flush` empties the buffer,
// and a response with an error is not kept.
module tb_instr_buffer;
  import dt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic    tv, tr, trv, cv, cr, crv, flush, hitp;
  ic_req_t treq, creq;
  ic_rsp_t trsp, crsp;

  instr_buffer dut (.clk, .rst_n, .flush, .t_req_valid(tv), .t_req_ready(tr), .t_req(treq),
                    .t_rsp_valid(trv), .t_rsp(trsp), .c_req_valid(cv), .c_req_ready(cr),
                    .c_req(creq), .c_rsp_valid(crv), .c_rsp(crsp), .hit_pulse(hitp));

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [63:0] f(input logic [31:0] va);
    return {va, ~va ^ 32'h1234_5678};
  endfunction

  // cache stand-in
  int   cache_accesses = 0;
  logic err_next = 1'b0;
  initial begin
    cr = 1'b1; crv = 1'b0; crsp = '0;
    forever begin
      @(posedge clk);
      if (cv && cr) begin
        ic_req_t r;
        r = creq;
        cache_accesses++;
        cr <= 1'b0;
        repeat ($urandom_range(2, 6)) @(posedge clk);
        crv <= 1'b1;
        crsp <= '{tid: r.tid, data: f(r.va), err: err_next};
        @(posedge clk);
        crv <= 1'b0;
        cr  <= 1'b1;
      end
    end
  end

  // reference model
  logic        m_v   [64];
  logic [22:0] m_tag [64];

  task automatic fetch(input logic [31:0] va, input logic tid, input logic expect_err);
    logic exp_hit;
    int   lat, acc_before;
    exp_hit = m_v[va[8:3]] && m_tag[va[8:3]] == va[31:9];
    @(negedge clk);
    tv = 1'b1; treq.va = va; treq.tid = tid;
    #1;
    while (!tr) begin @(negedge clk); #1; end
    acc_before = cache_accesses;
    @(negedge clk);
    tv = 1'b0;
    lat = 1;
    while (!trv) begin @(negedge clk); lat++; end
    check(trsp.data == f(va) && trsp.tid == tid && trsp.err == expect_err, "fetched data");
    if (exp_hit) begin
      check(lat == 1, "hit answered in one cycle");
      check(cache_accesses == acc_before, "hit makes no cache access");
    end else begin
      check(lat > 2 && cache_accesses == acc_before + 1, "miss goes to the cache");
      if (!expect_err) begin
        m_v[va[8:3]]   = 1'b1;
        m_tag[va[8:3]] = va[31:9];
      end
    end
  endtask

  int misses_before;
  initial begin
    tv = 1'b0; treq = '0; flush = 1'b0;
    for (int i = 0; i < 64; i++) m_v[i] = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // spin loop: 4 pairs at 0x1000, 40 iterations
    for (int it = 0; it < 40; it++)
      for (int k = 0; k < 4; k++) fetch(32'h1000 + 32'(k * 8), 1'b1, 1'b0);
    check(cache_accesses == 4, "spin loop served from the buffer");
    // random fetches over 3 KB with aliasing
    for (int i = 0; i < 600; i++) fetch(32'h0002_0000 + ({$urandom_range(0, 383)} << 3), 1'b0, 1'b0);
    // flush
    @(negedge clk); flush = 1'b1; @(negedge clk); flush = 1'b0;
    for (int i = 0; i < 64; i++) m_v[i] = 1'b0;
    misses_before = cache_accesses;
    fetch(32'h1000, 1'b0, 1'b0);
    check(cache_accesses == misses_before + 1, "flush empties the buffer");
    // error response is passed on but not kept
    err_next = 1'b1;
    fetch(32'h0000_3000, 1'b0, 1'b1);
    err_next = 1'b0;
    fetch(32'h0000_3000, 1'b0, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
