// dcache: shared virtually-indexed, virtually-tagged data cache.
//
// SIZE_BYTES bytes, WAYS-way set associative, 64-byte lines, write-through
// with write-allocate, not-most-recently-used replacement. Accesses are 8-byte
// aligned double words with byte enables (bit b of `be` covers wdata[8b+7:8b];
// bit 7 is the byte at the lowest address, SPARC being big-endian).
//
// Pipeline: a request accepted in cycle t reads tags and data (synchronous
// read); in cycle t+1 the tags are compared.
//   load hit   -> data returned in t+1, next request accepted in t+1.
//   store hit  -> the line is updated at the end of t+1, the store is put in
//                 the write queue and acknowledged in t+1. A load accepted in
//                 t+1 (by either thread) is bypassed the stored bytes, so a
//                 store is visible to a load issued one cycle later.
//   miss       -> the cache blocks: the write queue is drained, the line is
//                 read from the MMU (eight beats) into the NMRU victim way, a
//                 store is merged into its beat and queued, and the request
//                 is answered the cycle after the last beat.
//   nc (I/O)   -> loads wait for the write queue to drain and are read
//                 singly through the MMU; stores only go to the write queue.
//                 Neither touches the cache arrays.
// The write queue (WQ_DEPTH entries) sends the write-through traffic to the
// MMU one write at a time in the background; a store finding it full waits.
// Write errors reported by the MMU are counted in `wr_err_pulse` only, since
// the store has already been acknowledged.
//
// Sizes, VIVT, write-through-allocate, NMRU, one-cycle hit and blocking
// misses follow the paper. The write queue, its depth, the bypass and the
// non-cacheable path are this design's choices.
module dcache
  import dt_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 32768,
  parameter int unsigned WAYS       = 4,
  parameter int unsigned WQ_DEPTH   = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  dc_req_t   req,
  output logic      rsp_valid,
  output dc_rsp_t   rsp,
  output logic      m_req_valid,
  input  logic      m_req_ready,
  output mem_req_t  m_req,
  input  logic      m_rsp_valid,
  input  mem_rsp_t  m_rsp,
  output logic      hit_pulse,
  output logic      miss_pulse,
  output logic      wr_err_pulse
);

  localparam int unsigned SETS = SIZE_BYTES / (WAYS * LINE_BYTES);
  localparam int unsigned SW   = $clog2(SETS);
  localparam int unsigned OW   = $clog2(LINE_BYTES);
  localparam int unsigned BW   = $clog2(BEATS);
  localparam int unsigned TW   = VA_W - SW - OW;
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned QW   = $clog2(WQ_DEPTH);

  typedef enum logic [2:0] {S_RUN, S_DRAIN, S_REQ, S_FILL, S_NCRD} state_e;
  state_e state;

  function automatic logic [DW-1:0] merge(input logic [DW-1:0] old, input logic [DW-1:0] nw,
                                          input logic [7:0] be);
    for (int b = 0; b < 8; b++)
      if (be[b]) old[8*b +: 8] = nw[8*b +: 8];
    return old;
  endfunction

  // valid bits and MRU way (flops); tag and data arrays are per way below
  logic [SETS-1:0] vmem [WAYS];
  logic [WW-1:0]   mru  [SETS];

  logic            q_v;
  dc_req_t         q;
  logic [DW-1:0]   d_rd [WAYS];
  logic [TW-1:0]   t_rd [WAYS];
  logic [WAYS-1:0] v_rd;
  logic [WAYS-1:0] byp_q;
  logic [DW-1:0]   byp_data;
  logic [7:0]      byp_be;

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
        hit_data = byp_q[w] ? merge(d_rd[w], byp_data, byp_be) : d_rd[w];
      end
    end
    hit = |hitv && !q.nc;
  end

  logic [WW-1:0] victim;
  always_comb begin
    victim = WW'((32'(mru[q_set]) + 1) % WAYS);
    for (int w = WAYS - 1; w >= 0; w--)
      if (!v_rd[w]) victim = WW'(w);
  end

  // write queue
  mem_req_t        wq [WQ_DEPTH];
  logic [QW-1:0]   wq_rd, wq_wr;
  logic [QW:0]     wq_cnt;
  logic            wq_full, wq_push, wq_pop, wr_busy;
  mem_req_t        wq_in;
  assign wq_full = (wq_cnt == (QW+1)'(WQ_DEPTH));

  // lookup-cycle decisions
  logic look, done, st_wr;
  assign look  = (state == S_RUN) && q_v;
  always_comb begin
    done  = 1'b0;
    st_wr = 1'b0;
    if (look) begin
      if (q.nc)       done = q.we && !wq_full;
      else if (hit)   begin
        done  = !q.we || !wq_full;
        st_wr = q.we && !wq_full;
      end
    end
  end

  logic accept;
  assign req_ready = (state == S_RUN) && (!q_v || done);
  assign accept    = req_valid && req_ready;

  assign hit_pulse  = look && hit && done;
  assign miss_pulse = look && !q.nc && !hit;

  logic [WW-1:0] fill_way;
  logic [BW-1:0] fill_cnt;
  logic          fill_err;
  logic [DW-1:0] fill_word;
  logic [DW-1:0] beat;
  assign beat = (q.we && fill_cnt == q_word) ? merge(m_rsp.rdata, q.wdata, q.be) : m_rsp.rdata;

  logic fill_done, nc_done;
  assign fill_done = (state == S_FILL) && m_rsp_valid && m_rsp.last;
  assign nc_done   = (state == S_NCRD) && m_rsp_valid;

  // array reads on accept, with bypass of a store written in the same cycle
  logic [SW+BW-1:0] rd_addr, st_addr;
  assign rd_addr = {req.va[OW +: SW], req.va[3 +: BW]};
  assign st_addr = {q_set, q_word};
  // one write port per way: a store hit (byte enables) or a fill beat
  logic              fill_beat;
  logic [SW+BW-1:0]  wr_addr;
  logic [DW-1:0]     wr_data;
  logic [7:0]        wr_be;
  logic [WW-1:0]     wr_way;
  assign fill_beat = (state == S_FILL) && m_rsp_valid;
  assign wr_addr   = fill_beat ? {q_set, fill_cnt} : st_addr;
  assign wr_data   = fill_beat ? beat : q.wdata;
  assign wr_be     = fill_beat ? 8'hFF : q.be;
  assign wr_way    = fill_beat ? fill_way : hit_way;

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    logic [DW-1:0] dmem [SETS*BEATS];
    logic [TW-1:0] tmem [SETS];
    logic          wr_here;
    assign wr_here = (fill_beat || st_wr) && (wr_way == WW'(w));
    always_ff @(posedge clk) begin
      if (accept) begin
        d_rd[w]  <= dmem[rd_addr];
        t_rd[w]  <= tmem[req.va[OW +: SW]];
        byp_q[w] <= st_wr && (hit_way == WW'(w)) && (st_addr == rd_addr);
      end
      if (wr_here)
        for (int b = 0; b < 8; b++)
          if (wr_be[b]) dmem[wr_addr][8*b +: 8] <= wr_data[8*b +: 8];
      if (fill_beat && m_rsp.last && fill_way == WW'(w)) tmem[q_set] <= q_tag;
    end
  end

  always_ff @(posedge clk) begin
    if (accept) begin
      byp_data <= q.wdata;
      byp_be   <= q.be;
    end
    if (state == S_REQ && m_req_ready) fill_way <= victim;
    if (fill_beat) begin
      if (fill_cnt == q_word) fill_word <= beat;
      if (m_rsp.last) mru[q_set] <= fill_way;
    end
    if (look && hit && done) mru[q_set] <= hit_way;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < WAYS; w++) vmem[w] <= '0;
      v_rd <= '0;
    end else begin
      if (accept)
        for (int w = 0; w < WAYS; w++) v_rd[w] <= vmem[w][req.va[OW +: SW]];
      if (state == S_REQ && m_req_ready && !q.nc) vmem[victim][q_set] <= 1'b0;
      if (fill_done && !(fill_err || m_rsp.err)) vmem[fill_way][q_set] <= 1'b1;
    end
  end

  // write queue push/pop
  always_comb begin
    wq_push     = 1'b0;
    wq_in       = '0;
    wq_in.va    = {q.va[VA_W-1:3], 3'b000};
    wq_in.we    = 1'b1;
    wq_in.sup   = q.sup;
    wq_in.be    = q.be;
    wq_in.wdata = q.wdata;
    if (look && q.we && done) wq_push = 1'b1;
    if (fill_done && q.we && !(fill_err || m_rsp.err)) wq_push = 1'b1;
  end

  // memory port: line/nc reads in S_REQ, otherwise background writes
  logic rd_issue, wr_issue;
  assign rd_issue = (state == S_REQ);
  assign wr_issue = !rd_issue && (wq_cnt != 0) && !wr_busy &&
                    (state != S_FILL) && (state != S_NCRD);
  assign m_req_valid = rd_issue || wr_issue;
  always_comb begin
    if (rd_issue) begin
      m_req       = '0;
      m_req.line  = !q.nc;
      m_req.va    = q.nc ? {q.va[VA_W-1:3], 3'b000} : {q.va[VA_W-1:OW], {OW{1'b0}}};
      m_req.be    = q.be;
      m_req.sup   = q.sup;
    end else begin
      m_req = wq[wq_rd];
    end
  end
  assign wq_pop       = wr_busy && m_rsp_valid;
  assign wr_err_pulse = wq_pop && m_rsp.err;

  always_ff @(posedge clk) begin
    if (wq_push) wq[wq_wr] <= wq_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wq_rd   <= '0;
      wq_wr   <= '0;
      wq_cnt  <= '0;
      wr_busy <= 1'b0;
    end else begin
      if (wq_push) wq_wr <= wq_wr + 1'b1;
      if (wq_pop)  wq_rd <= wq_rd + 1'b1;
      wq_cnt <= wq_cnt + (QW+1)'(wq_push) - (QW+1)'(wq_pop);
      if (wr_issue && m_req_ready) wr_busy <= 1'b1;
      else if (wq_pop)             wr_busy <= 1'b0;
    end
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
          if (look && ((q.nc && !q.we) || (!q.nc && !hit))) begin
            state <= S_DRAIN;                 // miss or nc load
          end else if (!look || done) begin
            q_v <= accept;
          end
        end
        S_DRAIN: if (wq_cnt == 0 && !wr_busy) state <= S_REQ;
        S_REQ: if (m_req_ready) begin
          state    <= q.nc ? S_NCRD : S_FILL;
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
        S_NCRD: if (m_rsp_valid) begin
          state <= S_RUN;
          q_v   <= 1'b0;
        end
        default: state <= S_RUN;
      endcase
    end
  end

  logic          rsp_late_q;
  logic [DW-1:0] rsp_late_data;
  logic          rsp_late_err;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rsp_late_q <= 1'b0;
    else        rsp_late_q <= fill_done || nc_done;
  end
  always_ff @(posedge clk) begin
    if (fill_done) begin
      rsp_late_data <= (fill_cnt == q_word) ? beat : fill_word;
      rsp_late_err  <= fill_err || m_rsp.err;
    end else if (nc_done) begin
      rsp_late_data <= m_rsp.rdata;
      rsp_late_err  <= m_rsp.err;
    end
  end

  assign rsp_valid = (look && done) || rsp_late_q;
  always_comb begin
    rsp.tid   = q.tid;
    rsp.rdata = rsp_late_q ? rsp_late_data : hit_data;
    rsp.err   = rsp_late_q ? rsp_late_err : 1'b0;
  end

  a_wq_no_overflow : assert property (@(posedge clk) disable iff (!rst_n)
    wq_push |-> !wq_full);

endmodule
