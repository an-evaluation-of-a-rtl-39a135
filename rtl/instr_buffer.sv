// instr_buffer: small per-thread buffer of recently fetched instructions.
//
// It sits on the fetch path of one thread, in front of the instruction cache
// multiplexor. A fetch that hits in the buffer is answered one cycle later
// without touching the shared instruction cache; a fetch that misses is
// forwarded to the cache and the returned instruction pair is written into
// the buffer. While a thread runs a tight spin loop (waiting for a message
// from the other thread) all its fetches hit here, which leaves the cache
// bandwidth to the other thread.
//
// Organisation: ENTRIES instructions held as ENTRIES/2 direct-mapped slots of
// one 8-byte aligned instruction pair (the fetch unit's access size). Slot
// index = va[3 +: log2(ENTRIES/2)], tag = the virtual address bits above it.
// One fetch is outstanding at a time: the thread's fetch unit waits for each
// pair anyway. `flush` (and reset) invalidates every slot; the thread drives
// it when instruction memory may have changed (SPARC FLUSH, context switch).
// A response that carries an error is passed on but not kept.
//
// Interface: thread-side ic_req_t/ic_rsp_t valid/ready channel, cache-side
// the same towards the icache mux. Latency: hit 1 cycle, miss = icache
// latency. The 128-entry size is the paper's; the direct-mapped pair
// organisation and the flush input are this design's choices.
module instr_buffer
  import dt_pkg::*;
#(
  parameter int unsigned ENTRIES = 128
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     flush,
  // thread side
  input  logic     t_req_valid,
  output logic     t_req_ready,
  input  ic_req_t  t_req,
  output logic     t_rsp_valid,
  output ic_rsp_t  t_rsp,
  // cache side
  output logic     c_req_valid,
  input  logic     c_req_ready,
  output ic_req_t  c_req,
  input  logic     c_rsp_valid,
  input  ic_rsp_t  c_rsp,
  // statistics
  output logic     hit_pulse
);

  localparam int unsigned SLOTS = ENTRIES / 2;
  localparam int unsigned IW    = $clog2(SLOTS);
  localparam int unsigned TW    = VA_W - 3 - IW;

  logic [SLOTS-1:0] vld;
  logic [TW-1:0]    tags [SLOTS];
  logic [DW-1:0]    data [SLOTS];

  logic          pending;   // a miss is outstanding in the cache
  logic [VA_W-1:0] pend_va;
  logic          hit_q;
  ic_rsp_t       hit_rsp_q;

  logic [IW-1:0] idx;
  logic [TW-1:0] tag;
  logic          hit;

  assign idx = t_req.va[3 +: IW];
  assign tag = t_req.va[VA_W-1 -: TW];
  assign hit = vld[idx] && (tags[idx] == tag);

  // New requests only while nothing is outstanding and no flush is under way.
  assign t_req_ready = !pending && !flush && (hit || c_req_ready);
  assign c_req_valid = t_req_valid && !pending && !flush && !hit;
  assign c_req       = t_req;
  assign hit_pulse   = t_req_valid && t_req_ready && hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld     <= '0;
      pending <= 1'b0;
      hit_q   <= 1'b0;
    end else begin
      hit_q <= t_req_valid && t_req_ready && hit;
      if (c_req_valid && c_req_ready) pending <= 1'b1;
      if (c_rsp_valid) pending <= 1'b0;
      if (flush) vld <= '0;
      else if (c_rsp_valid && pending && !c_rsp.err)
        vld[pend_va[3 +: IW]] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (c_req_valid && c_req_ready) pend_va <= t_req.va;
    if (c_rsp_valid && pending && !c_rsp.err) begin
      tags[pend_va[3 +: IW]] <= pend_va[VA_W-1 -: TW];
      data[pend_va[3 +: IW]] <= c_rsp.data;
    end
    hit_rsp_q.tid  <= t_req.tid;
    hit_rsp_q.data <= data[idx];
    hit_rsp_q.err  <= 1'b0;
  end

  assign t_rsp_valid = hit_q || c_rsp_valid;
  assign t_rsp       = hit_q ? hit_rsp_q : c_rsp;

  a_one_rsp : assert property (@(posedge clk) disable iff (!rst_n)
    !(hit_q && c_rsp_valid));

endmodule
