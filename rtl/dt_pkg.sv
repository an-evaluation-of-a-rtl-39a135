// dt_pkg: types and constants shared by the dual-threaded core.
//
// Every link in the memory system is a valid/ready request channel plus a
// response channel that has no back-pressure (the receiver always accepts a
// response). The payload of each channel is one of the packed structs below.
//
//   thread  -> ibuf/icache mux -> icache : ic_req_t / ic_rsp_t
//   thread  -> dcache mux      -> dcache : dc_req_t / dc_rsp_t
//   caches  -> MMU                       : mem_req_t / mem_rsp_t (virtual addresses)
//   MMU     -> system bus                : bus_req_t / bus_rsp_t (physical addresses)
//
// Fixed by the paper: 64-byte cache lines, two 32-bit instructions per fetch,
// two hardware threads, SPARC V8 32-bit virtual and 36-bit physical addresses.
// Chosen here: 64-bit data paths, a line moved as eight 64-bit beats, the
// thread id carried with each cache request so that responses can be routed
// back, the supervisor bit carried down to the MMU for its permission check,
// and the encodings of the control commands and modes.
package dt_pkg;

  localparam int unsigned NTHREADS   = 2;
  localparam int unsigned VA_W       = 32;
  localparam int unsigned PA_W       = 36;
  localparam int unsigned DW         = 64;
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned BEATS      = LINE_BYTES / (DW / 8);  // 8 beats per line

  // Instruction fetch: one 8-byte aligned pair of instructions.
  typedef struct packed {
    logic            tid;   // requesting thread
    logic            sup;   // thread is in supervisor mode
    logic [VA_W-1:0] va;    // virtual address, bits [2:0] ignored
  } ic_req_t;

  typedef struct packed {
    logic            tid;
    logic [DW-1:0]   data;  // {instr at va, instr at va+4} (big-endian)
    logic            err;   // translation or bus error
  } ic_rsp_t;

  // Load/store: one 8-byte aligned double word with byte enables.
  typedef struct packed {
    logic            tid;
    logic            sup;    // thread is in supervisor mode
    logic [VA_W-1:0] va;
    logic            we;     // 1: store
    logic [7:0]      be;     // byte enables, bit 7 = byte at va[2:0]==0 (big-endian)
    logic [DW-1:0]   wdata;
    logic            lock;   // keep the data cache for this thread after this access
    logic            nc;     // non-cacheable (I/O) access, bypasses the cache
  } dc_req_t;

  typedef struct packed {
    logic            tid;
    logic [DW-1:0]   rdata;
    logic            err;
  } dc_rsp_t;

  // Cache to MMU.
  typedef struct packed {
    logic            sup;    // supervisor access (for the MMU's permission check)
    logic [VA_W-1:0] va;
    logic            we;     // single double-word write
    logic            line;   // 1: read a whole line (BEATS responses)
    logic [7:0]      be;
    logic [DW-1:0]   wdata;
  } mem_req_t;

  typedef struct packed {
    logic [DW-1:0]   rdata;
    logic            last;   // last response of this request
    logic            err;
  } mem_rsp_t;

  // MMU to system bus.
  typedef struct packed {
    logic [PA_W-1:0] pa;
    logic            we;
    logic            line;
    logic [7:0]      be;
    logic [DW-1:0]   wdata;
  } bus_req_t;

  typedef struct packed {
    logic [DW-1:0]   rdata;
    logic            last;
  } bus_rsp_t;

  // Per-thread control commands and modes.
  typedef enum logic [2:0] {
    CMD_NOP      = 3'd0,
    CMD_RESET    = 3'd1,  // hold the thread in reset, deactivated
    CMD_START    = 3'd2,  // release reset and run (activate)
    CMD_STOP     = 3'd3,  // deactivate (stop issuing, save power)
    CMD_HALT     = 3'd4,  // enter debug mode
    CMD_CONTINUE = 3'd5,  // leave debug mode
    CMD_STEP     = 3'd6   // run one instruction, then back to debug mode
  } ctrl_cmd_e;

  typedef enum logic [1:0] {
    MODE_IDLE  = 2'd0,    // reset or deactivated
    MODE_RUN   = 2'd1,
    MODE_DEBUG = 2'd2,
    MODE_ERROR = 2'd3
  } thread_mode_e;

  typedef enum logic [1:0] {
    EVT_HALTED  = 2'd0,   // thread entered debug mode
    EVT_ERROR   = 2'd1,   // thread entered error mode
    EVT_STOPPED = 2'd2    // thread deactivated
  } ctrl_evt_e;

endpackage
