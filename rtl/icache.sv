// icache: shared virtually-indexed, virtually-tagged instruction cache.
//
// SIZE_BYTES bytes, WAYS-way set associative, 64-byte lines, read only. Each
// access returns an 8-byte aligned pair of instructions. A request accepted in
// cycle t reads the tag and data arrays (synchronous read) and, on a hit, the
// pair is returned in cycle t+1; a new request can be accepted in that same
// cycle, so back-to-back hits run at one per cycle. On a miss the cache
// blocks: it asks the MMU for the whole line (eight 64-bit beats), writes the
// beats into the victim way, answers the request from the beat that holds the
// wanted pair, and then accepts requests again. Both threads' fetches wait
// behind a miss of either thread.
//
// Replacement is not-most-recently-used: each set keeps the way last hit or
// filled; the victim is the first invalid way, else the way after the MRU way.
// Valid bits are cleared at reset. The response carries the thread id of the
// request so the icache mux can route it.
//
// Sizes, VIVT organisation, one-cycle hit, blocking miss and NMRU replacement
// follow the paper; the NMRU victim choice among the non-MRU ways, the beat
// order and the interfaces are this design's.
module icache
  import dt_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 32768,
  parameter int unsigned WAYS       = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  // from icache mux
  input  logic      req_valid,
  output logic      req_ready,
  input  ic_req_t   req,
  output logic      rsp_valid,
  output ic_rsp_t   rsp,
  // to MMU
  output logic      m_req_valid,
  input  logic      m_req_ready,
  output mem_req_t  m_req,
  input  logic      m_rsp_valid,
  input  mem_rsp_t  m_rsp,
  // statistics
  output logic      hit_pulse,
  output logic      miss_pulse
);

  localparam int unsigned SETS = SIZE_BYTES / (WAYS * LINE_BYTES);
  localparam int unsigned SW   = $clog2(SETS);
  localparam int unsigned OW   = $clog2(LINE_BYTES);
  localparam int unsigned BW   = $clog2(BEATS);
  localparam int unsigned TW   = VA_W - SW - OW;
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef enum logic [1:0] {S_RUN, S_REQ, S_FILL} state_e;
  state_e state;

  // valid bits and MRU way (flops); tag and data arrays are per way below
  logic [SETS-1:0] vmem [WAYS];
  logic [WW-1:0]   mru  [SETS];

  // registered request and array read data
  logic            q_v;
  ic_req_t         q;
  logic [DW-1:0]   d_rd [WAYS];
  logic [TW-1:0]   t_rd [WAYS];
  logic [WAYS-1:0] v_rd;

  logic [SW-1:0]   q_set;
  logic [TW-1:0]   q_tag;
  logic [BW-1:0]   q_word;
  assign q_set  = q.va[OW +: SW];
  assign q_tag  = q.va[VA_W-1 -: TW];
  assign q_word = q.va[3 +: BW];

  logic [WAYS-1:0] hitv;
  logic            hit;
  logic [WW-1:0]   hit_way;
  logic [DW-1:0]   hit_data;
  always_comb begin
    hit_way  = '0;
    hit_data = '0;
    for (int w = 0; w < WAYS; w++) begin
      hitv[w] = v_rd[w] && (t_rd[w] == q_tag);
      if (hitv[w]) begin
        hit_way  = WW'(w);
        hit_data = d_rd[w];
      end
    end
    hit = |hitv;
  end

  // victim: first invalid way, else the way after the most recently used
  logic [WW-1:0] victim;
  always_comb begin
    victim = WW'((32'(mru[q_set]) + 1) % WAYS);
    for (int w = WAYS - 1; w >= 0; w--)
      if (!v_rd[w]) victim = WW'(w);
  end

  logic accept;
  assign req_ready = (state == S_RUN) && (!q_v || hit);
  assign accept    = req_valid && req_ready;

  logic [WW-1:0] fill_way;
  logic [BW-1:0] fill_cnt;
  logic          fill_err;
  logic [DW-1:0] fill_word;

  assign m_req_valid = (state == S_REQ);
  always_comb begin
    m_req       = '0;
    m_req.va    = {q.va[VA_W-1:OW], {OW{1'b0}}};
    m_req.line  = 1'b1;
    m_req.sup   = q.sup;
  end

  assign hit_pulse  = (state == S_RUN) && q_v && hit;
  assign miss_pulse = (state == S_RUN) && q_v && !hit;

  // one data RAM and one tag RAM per way: synchronous read on accept, one
  // write port used by the line fill
  for (genvar w = 0; w < WAYS; w++) begin : g_way
    logic [DW-1:0] dmem [SETS*BEATS];
    logic [TW-1:0] tmem [SETS];
    logic          fill_here;
    assign fill_here = (state == S_FILL) && m_rsp_valid && (fill_way == WW'(w));
    always_ff @(posedge clk) begin
      if (accept) begin
        d_rd[w] <= dmem[{req.va[OW +: SW], req.va[3 +: BW]}];
        t_rd[w] <= tmem[req.va[OW +: SW]];
      end
      if (fill_here) dmem[{q_set, fill_cnt}] <= m_rsp.rdata;
      if (fill_here && m_rsp.last) tmem[q_set] <= q_tag;
    end
  end

  // valid bits (reset) and read copy
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < WAYS; w++) vmem[w] <= '0;
      v_rd <= '0;
    end else begin
      if (accept)
        for (int w = 0; w < WAYS; w++) v_rd[w] <= vmem[w][req.va[OW +: SW]];
      if (state == S_REQ && m_req_ready) vmem[victim][q_set] <= 1'b0;
      if (state == S_FILL && m_rsp_valid && m_rsp.last && !(fill_err || m_rsp.err))
        vmem[fill_way][q_set] <= 1'b1;
    end
  end

  // fill path, tags, MRU
  always_ff @(posedge clk) begin
    if (state == S_REQ && m_req_ready) fill_way <= victim;
    if (state == S_FILL && m_rsp_valid) begin
      if (fill_cnt == q_word) fill_word <= m_rsp.rdata;
      if (m_rsp.last) mru[q_set] <= fill_way;
    end
    if (state == S_RUN && q_v && hit) mru[q_set] <= hit_way;
  end

  always_ff @(posedge clk) begin
    if (accept) q <= req;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_RUN;
      q_v      <= 1'b0;
      fill_cnt <= '0;
      fill_err <= 1'b0;
    end else begin
      case (state)
        S_RUN: begin
          if (q_v && !hit) begin
            state <= S_REQ;
          end else begin
            q_v <= accept;
          end
        end
        S_REQ: if (m_req_ready) begin
          state    <= S_FILL;
          fill_cnt <= '0;
          fill_err <= 1'b0;
        end
        S_FILL: if (m_rsp_valid) begin
          fill_cnt <= fill_cnt + 1'b1;
          if (m_rsp.err) fill_err <= 1'b1;
          if (m_rsp.last) begin
            state <= S_RUN;
            q_v   <= 1'b0;
          end
        end
        default: state <= S_RUN;
      endcase
    end
  end

  // response: hit in the lookup cycle, or at the end of a fill
  logic fill_done;
  assign fill_done = (state == S_FILL) && m_rsp_valid && m_rsp.last;
  logic          rsp_fill_q;
  logic [DW-1:0] rsp_fill_data;
  logic          rsp_fill_err;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rsp_fill_q <= 1'b0;
    else        rsp_fill_q <= fill_done;
  end
  always_ff @(posedge clk) begin
    if (fill_done) begin
      rsp_fill_data <= (fill_cnt == q_word) ? m_rsp.rdata : fill_word;
      rsp_fill_err  <= fill_err || m_rsp.err;
    end
  end

  assign rsp_valid = ((state == S_RUN) && q_v && hit) || rsp_fill_q;
  always_comb begin
    rsp.tid  = q.tid;
    rsp.data = rsp_fill_q ? rsp_fill_data : hit_data;
    rsp.err  = rsp_fill_q ? rsp_fill_err : 1'b0;
  end

endmodule
