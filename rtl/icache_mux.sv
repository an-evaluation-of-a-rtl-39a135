// icache_mux: connects the fetch ports of the two threads to the single shared
// instruction cache.
//
// Each cycle at most one fetch request is passed to the cache. When both
// threads fetch in the same cycle the thread that was not served last wins
// (round robin), which gives each thread at least every other cache slot.
// Since a thread fetches a pair of instructions per access, it needs about
// one access every two cycles, so two threads fit in the cache's bandwidth.
// The mux stamps the thread id into the request and routes the response back
// by the id the cache returns.
//
// Timing: combinational request path; only the round-robin pointer is a
// register. The fairness requirement is the paper's; round robin is this
// design's choice. Fetches never need the cache lock, so this mux has none.
module icache_mux
  import dt_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NTHREADS-1:0]   t_req_valid,
  output logic [NTHREADS-1:0]   t_req_ready,
  input  ic_req_t               t_req [NTHREADS],
  output logic [NTHREADS-1:0]   t_rsp_valid,
  output ic_rsp_t               t_rsp,
  output logic                  c_req_valid,
  input  logic                  c_req_ready,
  output ic_req_t               c_req,
  input  logic                  c_rsp_valid,
  input  ic_rsp_t               c_rsp
);

  logic last;
  logic sel;

  assign sel         = (t_req_valid == 2'b11) ? ~last : t_req_valid[1];
  assign c_req_valid = |t_req_valid;

  always_comb begin
    c_req     = t_req[sel];
    c_req.tid = sel;
  end

  always_comb begin
    t_req_ready      = '0;
    t_req_ready[sel] = c_req_ready & t_req_valid[sel];
  end

  assign t_rsp          = c_rsp;
  assign t_rsp_valid[0] = c_rsp_valid & (c_rsp.tid == 1'b0);
  assign t_rsp_valid[1] = c_rsp_valid & (c_rsp.tid == 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          last <= 1'b1;
    else if (c_req_valid && c_req_ready) last <= sel;
  end

  for (genvar t = 0; t < NTHREADS; t++) begin : g_hold
    a_hold : assert property (@(posedge clk) disable iff (!rst_n)
      t_req_valid[t] && !t_req_ready[t] |=> t_req_valid[t]);
  end

endmodule
