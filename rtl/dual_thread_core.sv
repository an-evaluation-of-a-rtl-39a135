// dual_thread_core: memory system and control of a processor with two
// identical, independent, single-issue in-order execution pipelines
// (hardware threads) that share one instruction cache, one data cache and
// one MMU.
//
// The execution pipelines themselves are outside this module: each thread
// connects through a fetch port (one pair of instructions per access), a
// load/store port and a control port. Inside:
//
//   fetch[t] -> instr_buffer[t] -> icache_mux -> icache --\
//                                                          mmu -> system bus
//   ls[t]    ------------------> dcache_mux -> dcache ----/
//   debug port -> debug_aggregator -> thread_ctrl[t] -> run/reset of thread t
//
// Because both threads use the same level-1 caches there is nothing to keep
// coherent between them: a store by one thread is seen by a load of the other
// one cycle later. The price is sharing: a cache blocks on a miss, so a miss
// by one thread stalls the other thread's accesses to that cache, and a
// locked (atomic) sequence of one thread holds off the other's loads and
// stores. Thread 0 comes out of reset running; thread 1 waits for a
// CMD_START on the debug port (it is the helper thread that thread 0 hands
// work to through shared memory).
//
// The per-thread interrupt level inputs go straight into the pipelines and
// so do not pass through this module. All ports are plain signals, structs
// and arrays; the timing of each channel is described in the sub-modules.
module dual_thread_core
  import dt_pkg::*;
#(
  parameter int unsigned IBUF_ENTRIES = 128,
  parameter int unsigned ICACHE_BYTES = 32768,
  parameter int unsigned DCACHE_BYTES = 32768,
  parameter int unsigned CACHE_WAYS   = 4,
  parameter int unsigned WQ_DEPTH     = 4,
  parameter int unsigned TLB_ENTRIES  = 256,
  parameter int unsigned TLB_WAYS     = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  // fetch ports
  input  logic [NTHREADS-1:0] if_req_valid,
  output logic [NTHREADS-1:0] if_req_ready,
  input  ic_req_t             if_req [NTHREADS],
  output logic [NTHREADS-1:0] if_rsp_valid,
  output ic_rsp_t             if_rsp [NTHREADS],
  input  logic [NTHREADS-1:0] ibuf_flush,
  // load/store ports
  input  logic [NTHREADS-1:0] ls_req_valid,
  output logic [NTHREADS-1:0] ls_req_ready,
  input  dc_req_t             ls_req [NTHREADS],
  output logic [NTHREADS-1:0] ls_rsp_valid,
  output dc_rsp_t             ls_rsp,
  // pipeline control
  input  logic [NTHREADS-1:0] thread_error,
  input  logic [NTHREADS-1:0] thread_bp,
  input  logic [NTHREADS-1:0] retire,
  output logic [NTHREADS-1:0] thread_reset,
  output logic [NTHREADS-1:0] thread_run,
  // control/debug port
  input  logic                dbg_cmd_valid,
  output logic                dbg_cmd_ready,
  input  logic                dbg_cmd_tid,
  input  logic                dbg_cmd_all,
  input  ctrl_cmd_e           dbg_cmd,
  output logic                dbg_rsp_valid,
  input  logic                dbg_rsp_ready,
  output logic                dbg_rsp_tid,
  output ctrl_evt_e           dbg_rsp_evt,
  output thread_mode_e        thread_mode [NTHREADS],
  output logic                dbg_evt_lost,
  // MMU registers
  input  logic                mmu_reg_we,
  input  logic [2:0]          mmu_reg_addr,
  input  logic [31:0]         mmu_reg_wdata,
  output logic [31:0]         mmu_reg_rdata,
  input  logic                tlb_flush,
  // system bus
  output logic                bus_req_valid,
  input  logic                bus_req_ready,
  output bus_req_t            bus_req,
  input  logic                bus_rsp_valid,
  input  bus_rsp_t            bus_rsp,
  // event pulses for performance counters
  output logic [NTHREADS-1:0] ibuf_hit,
  output logic                icache_hit,
  output logic                icache_miss,
  output logic                dcache_hit,
  output logic                dcache_miss,
  output logic                dcache_wr_err,
  output logic                tlb_hit,
  output logic                tlb_miss,
  output logic                mmu_fault
);

  // ---------------- fetch path ----------------
  logic [NTHREADS-1:0] ib_c_valid, ib_c_ready, ib_c_rsp_valid;
  ic_req_t             ib_c_req [NTHREADS];
  ic_rsp_t             imux_rsp;

  for (genvar t = 0; t < NTHREADS; t++) begin : g_ibuf
    instr_buffer #(.ENTRIES(IBUF_ENTRIES)) u_ibuf (
      .clk, .rst_n,
      .flush       (ibuf_flush[t]),
      .t_req_valid (if_req_valid[t]),
      .t_req_ready (if_req_ready[t]),
      .t_req       (if_req[t]),
      .t_rsp_valid (if_rsp_valid[t]),
      .t_rsp       (if_rsp[t]),
      .c_req_valid (ib_c_valid[t]),
      .c_req_ready (ib_c_ready[t]),
      .c_req       (ib_c_req[t]),
      .c_rsp_valid (ib_c_rsp_valid[t]),
      .c_rsp       (imux_rsp),
      .hit_pulse   (ibuf_hit[t])
    );
  end

  logic    ic_req_valid, ic_req_ready, ic_rsp_valid;
  ic_req_t ic_req;
  ic_rsp_t ic_rsp;

  icache_mux u_imux (
    .clk, .rst_n,
    .t_req_valid (ib_c_valid),
    .t_req_ready (ib_c_ready),
    .t_req       (ib_c_req),
    .t_rsp_valid (ib_c_rsp_valid),
    .t_rsp       (imux_rsp),
    .c_req_valid (ic_req_valid),
    .c_req_ready (ic_req_ready),
    .c_req       (ic_req),
    .c_rsp_valid (ic_rsp_valid),
    .c_rsp       (ic_rsp)
  );

  logic     icm_req_valid, icm_req_ready, icm_rsp_valid;
  mem_req_t icm_req;
  mem_rsp_t icm_rsp;

  icache #(.SIZE_BYTES(ICACHE_BYTES), .WAYS(CACHE_WAYS)) u_icache (
    .clk, .rst_n,
    .req_valid   (ic_req_valid),
    .req_ready   (ic_req_ready),
    .req         (ic_req),
    .rsp_valid   (ic_rsp_valid),
    .rsp         (ic_rsp),
    .m_req_valid (icm_req_valid),
    .m_req_ready (icm_req_ready),
    .m_req       (icm_req),
    .m_rsp_valid (icm_rsp_valid),
    .m_rsp       (icm_rsp),
    .hit_pulse   (icache_hit),
    .miss_pulse  (icache_miss)
  );

  // ---------------- load/store path ----------------
  logic    dc_req_valid, dc_req_ready, dc_rsp_valid;
  dc_req_t dc_req;
  dc_rsp_t dc_rsp;

  dcache_mux u_dmux (
    .clk, .rst_n,
    .t_req_valid (ls_req_valid),
    .t_req_ready (ls_req_ready),
    .t_req       (ls_req),
    .t_rsp_valid (ls_rsp_valid),
    .t_rsp       (ls_rsp),
    .c_req_valid (dc_req_valid),
    .c_req_ready (dc_req_ready),
    .c_req       (dc_req),
    .c_rsp_valid (dc_rsp_valid),
    .c_rsp       (dc_rsp)
  );

  logic     dcm_req_valid, dcm_req_ready, dcm_rsp_valid;
  mem_req_t dcm_req;
  mem_rsp_t dcm_rsp;

  dcache #(.SIZE_BYTES(DCACHE_BYTES), .WAYS(CACHE_WAYS), .WQ_DEPTH(WQ_DEPTH)) u_dcache (
    .clk, .rst_n,
    .req_valid    (dc_req_valid),
    .req_ready    (dc_req_ready),
    .req          (dc_req),
    .rsp_valid    (dc_rsp_valid),
    .rsp          (dc_rsp),
    .m_req_valid  (dcm_req_valid),
    .m_req_ready  (dcm_req_ready),
    .m_req        (dcm_req),
    .m_rsp_valid  (dcm_rsp_valid),
    .m_rsp        (dcm_rsp),
    .hit_pulse    (dcache_hit),
    .miss_pulse   (dcache_miss),
    .wr_err_pulse (dcache_wr_err)
  );

  // ---------------- MMU ----------------
  mmu #(.TLB_ENTRIES(TLB_ENTRIES), .TLB_WAYS(TLB_WAYS)) u_mmu (
    .clk, .rst_n,
    .ic_req_valid   (icm_req_valid),
    .ic_req_ready   (icm_req_ready),
    .ic_req         (icm_req),
    .ic_rsp_valid   (icm_rsp_valid),
    .ic_rsp         (icm_rsp),
    .dc_req_valid   (dcm_req_valid),
    .dc_req_ready   (dcm_req_ready),
    .dc_req         (dcm_req),
    .dc_rsp_valid   (dcm_rsp_valid),
    .dc_rsp         (dcm_rsp),
    .bus_req_valid,
    .bus_req_ready,
    .bus_req,
    .bus_rsp_valid,
    .bus_rsp,
    .reg_we         (mmu_reg_we),
    .reg_addr       (mmu_reg_addr),
    .reg_wdata      (mmu_reg_wdata),
    .reg_rdata      (mmu_reg_rdata),
    .tlb_flush,
    .tlb_hit_pulse  (tlb_hit),
    .tlb_miss_pulse (tlb_miss),
    .fault_pulse    (mmu_fault)
  );

  // ---------------- control ----------------
  logic [NTHREADS-1:0] u_cmd_valid, u_evt_valid;
  ctrl_cmd_e           u_cmd;
  ctrl_evt_e           u_evt [NTHREADS];
  thread_mode_e        u_mode [NTHREADS];

  debug_aggregator u_dbg (
    .clk, .rst_n,
    .cmd_valid   (dbg_cmd_valid),
    .cmd_ready   (dbg_cmd_ready),
    .cmd_tid     (dbg_cmd_tid),
    .cmd_all     (dbg_cmd_all),
    .cmd         (dbg_cmd),
    .rsp_valid   (dbg_rsp_valid),
    .rsp_ready   (dbg_rsp_ready),
    .rsp_tid     (dbg_rsp_tid),
    .rsp_evt     (dbg_rsp_evt),
    .modes       (thread_mode),
    .evt_lost    (dbg_evt_lost),
    .u_cmd_valid (u_cmd_valid),
    .u_cmd       (u_cmd),
    .u_evt_valid (u_evt_valid),
    .u_evt       (u_evt),
    .u_mode      (u_mode)
  );

  for (genvar t = 0; t < NTHREADS; t++) begin : g_ctrl
    thread_ctrl #(.AUTO_START(t == 0)) u_ctrl (
      .clk, .rst_n,
      .cmd_valid    (u_cmd_valid[t]),
      .cmd          (u_cmd),
      .thread_error (thread_error[t]),
      .thread_bp    (thread_bp[t]),
      .retire       (retire[t]),
      .thread_reset (thread_reset[t]),
      .thread_run   (thread_run[t]),
      .mode         (u_mode[t]),
      .evt_valid    (u_evt_valid[t]),
      .evt          (u_evt[t])
    );
  end

endmodule
