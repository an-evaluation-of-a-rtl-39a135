// dcache_mux: connects the load/store ports of the two threads to the single
// shared data cache.
//
// Each cycle at most one thread request is passed to the cache. When both
// threads request, the thread that was not served last wins (round robin), so
// neither thread can starve the other. The mux stamps the winning thread's id
// into the request; the cache returns it with the response, and the mux hands
// the response to that thread only.
//
// Locking: a granted request with `lock` set gives the cache to that thread
// alone until the same thread has a request without `lock` granted. This
// keeps atomic read-modify-write sequences (ldstub, swap) indivisible; the
// other thread is stalled meanwhile.
//
// Timing: purely combinational request path (grant in the cycle the cache is
// ready); only the round-robin pointer and the lock state are registered.
// That the mux is fair and supports locking follows the paper; round robin
// and the lock protocol are this design's choice.
module dcache_mux
  import dt_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // thread side
  input  logic [NTHREADS-1:0]   t_req_valid,
  output logic [NTHREADS-1:0]   t_req_ready,
  input  dc_req_t               t_req [NTHREADS],
  output logic [NTHREADS-1:0]   t_rsp_valid,
  output dc_rsp_t               t_rsp,
  // cache side
  output logic                  c_req_valid,
  input  logic                  c_req_ready,
  output dc_req_t               c_req,
  input  logic                  c_rsp_valid,
  input  dc_rsp_t               c_rsp
);

  logic last;        // thread granted most recently
  logic locked;      // cache held by lock_owner
  logic lock_owner;
  logic [NTHREADS-1:0] elig;
  logic sel;

  always_comb begin
    elig = t_req_valid;
    if (locked) elig = lock_owner ? (t_req_valid & 2'b10) : (t_req_valid & 2'b01);
    if (elig == 2'b11) sel = ~last;
    else               sel = elig[1];
  end

  assign c_req_valid = |elig;
  always_comb begin
    c_req     = t_req[sel];
    c_req.tid = sel;
  end

  always_comb begin
    t_req_ready      = '0;
    t_req_ready[sel] = c_req_ready & elig[sel];
  end

  assign t_rsp          = c_rsp;
  assign t_rsp_valid[0] = c_rsp_valid & (c_rsp.tid == 1'b0);
  assign t_rsp_valid[1] = c_rsp_valid & (c_rsp.tid == 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last       <= 1'b1;
      locked     <= 1'b0;
      lock_owner <= 1'b0;
    end else if (c_req_valid && c_req_ready) begin
      last       <= sel;
      locked     <= t_req[sel].lock;
      lock_owner <= sel;
    end
  end

  // A thread holds its request stable until it is accepted.
  for (genvar t = 0; t < NTHREADS; t++) begin : g_hold
    a_hold : assert property (@(posedge clk) disable iff (!rst_n)
      t_req_valid[t] && !t_req_ready[t] |=> t_req_valid[t]);
  end
  // While locked, the other thread is never granted.
  a_lock : assert property (@(posedge clk) disable iff (!rst_n)
    locked && c_req_valid |-> sel == lock_owner);

endmodule
