// mmu: memory management unit shared by the instruction and data caches.
//
// The two caches hand their misses, non-cacheable accesses and write-through
// stores to the MMU with virtual addresses. The MMU serves one request at a
// time, alternating between the caches when both wait (round robin), so a
// slow access by one thread's cache holds up the other's. For each request it
//   1. translates the virtual address: with translation disabled (control
//      register bit E = 0, the reset state) the physical address is the
//      virtual one; otherwise the translation buffer is looked up and, on a
//      miss, the SPARC V8 reference-MMU table walk is run over the system bus:
//        context table entry at  CTP*64 + ctx*4
//        level-1 entry       at  PTP*64 + va[31:24]*4
//        level-2 entry       at  PTP*64 + va[23:18]*4
//        level-3 entry       at  PTP*64 + va[17:12]*4
//      where an entry with ET=1 is a page table descriptor (PTP in bits
//      [31:2]) and ET=2 a page table entry (PPN in [31:8], ACC in [4:2]). The
//      entry found has its referenced bit R (bit 5) set, and for a store its
//      modified bit M (bit 6); if that changes it, it is written back to
//      memory. It is then written into the TLB and the lookup is repeated.
//      ET=0 (invalid) or ET=3 (reserved), or a descriptor at level 3, ends the
//      walk with a fault: FSR and FAR are written and the cache gets one
//      response with `err` and `last` set.
//      Every access is checked against the ACC bits of its page, as the
//      reference MMU defines them, with the request's supervisor bit and
//      its kind (fetches from the icache execute, dcache requests read or
//      write). A refused access faults with FT = 3 (privilege violation: a
//      user access to a supervisor-only page) or FT = 2 (protection
//      error). A store through a TLB entry whose M bit is still clear is
//      sent through the walk so that M gets set in memory.
//   2. runs the bus transaction: a line read (eight beats forwarded to the
//      cache as they arrive), a single double-word read, or a write (one
//      acknowledge).
//
// Registers (reg_addr): 0 control (bit 0 = E), 1 context table pointer
// (bits [31:2] = PA[35:6]), 2 context, 3 fault status (FT in [4:2], AT in
// [7:5], L in [9:8], FAV bit 1), 4 fault address. In the full processor the threads reach
// them through alternate-space loads and stores; here they form a port.
// `tlb_flush` empties the TLB.
//
// Following the paper: one MMU shared by both caches, a 256-entry 8-way TLB,
// the reference-MMU table walk. This design's own: the arbitration, the bus
// protocol and register port. Not built: the fault types for bus errors
// (a bus error is not signalled by this bus), and the overwrite bit OW.
module mmu
  import dt_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 256,
  parameter int unsigned TLB_WAYS    = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction cache
  input  logic        ic_req_valid,
  output logic        ic_req_ready,
  input  mem_req_t    ic_req,
  output logic        ic_rsp_valid,
  output mem_rsp_t    ic_rsp,
  // data cache
  input  logic        dc_req_valid,
  output logic        dc_req_ready,
  input  mem_req_t    dc_req,
  output logic        dc_rsp_valid,
  output mem_rsp_t    dc_rsp,
  // system bus
  output logic        bus_req_valid,
  input  logic        bus_req_ready,
  output bus_req_t    bus_req,
  input  logic        bus_rsp_valid,
  input  bus_rsp_t    bus_rsp,
  // registers
  input  logic        reg_we,
  input  logic [2:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  input  logic        tlb_flush,
  // statistics
  output logic        tlb_hit_pulse,
  output logic        tlb_miss_pulse,
  output logic        fault_pulse
);

  typedef enum logic [3:0] {S_IDLE, S_XLATE, S_WREQ, S_WRSP, S_PWREQ, S_PWRSP, S_TWR,
                            S_BUS, S_BRSP, S_FAULT} state_e;
  state_e state;

  logic        r_en;
  logic [31:0] r_ctp;
  logic [7:0]  r_ctx;
  logic [31:0] r_fsr;
  logic [31:0] r_far;

  logic        client;     // 0: icache, 1: dcache
  logic        last;       // client served last
  mem_req_t    cur;
  logic [PA_W-1:0] pa;
  logic [PA_W-1:0] walk_addr;
  logic [1:0]  lvl;
  logic [31:0] pte_q;      // PTE found by the walk, with R (and M) set

  // arbitration
  logic sel;
  assign sel          = (ic_req_valid && dc_req_valid) ? ~last : dc_req_valid;
  assign ic_req_ready = (state == S_IDLE) && (sel == 1'b0) && ic_req_valid;
  assign dc_req_ready = (state == S_IDLE) && (sel == 1'b1) && dc_req_valid;

  // TLB
  logic            t_hit;
  logic [PA_W-1:0] t_pa;
  logic [2:0]      t_acc;
  logic            t_m;
  logic [1:0]      t_lvl;
  logic            t_wr;
  logic [31:0]     pte_word;

  tlb #(.ENTRIES(TLB_ENTRIES), .WAYS(TLB_WAYS), .CTX_W(8)) u_tlb (
    .clk, .rst_n,
    .flush  (tlb_flush),
    .lk_va  (cur.va),
    .lk_ctx (r_ctx),
    .lk_hit (t_hit),
    .lk_pa  (t_pa),
    .lk_acc (t_acc),
    .lk_m   (t_m),
    .lk_lvl (t_lvl),
    .wr_en  (t_wr),
    .wr_va  (cur.va),
    .wr_ctx (r_ctx),
    .wr_lvl (lvl),
    .wr_ppn (pte_q[31:8]),
    .wr_acc (pte_q[4:2]),
    .wr_m   (pte_q[6])
  );

  assign pte_word = walk_addr[2] ? bus_rsp.rdata[31:0] : bus_rsp.rdata[63:32];
  assign t_wr     = (state == S_TWR);

  // SPARC V8 reference-MMU access check: may an access of this kind use a
  // page with access bits acc?
  function automatic logic acc_ok(input logic [2:0] acc, input logic sup, input logic we,
                                  input logic ex);
    case (acc)
      3'd0:    return !we && !ex;             // read only
      3'd1:    return !ex;                    // read/write
      3'd2:    return !we;                    // read/execute
      3'd3:    return 1'b1;                   // read/write/execute
      3'd4:    return ex;                     // execute only
      3'd5:    return !ex && (!we || sup);    // user read, supervisor read/write
      3'd6:    return sup && !we;             // supervisor read/execute
      default: return sup;                    // supervisor read/write/execute
    endcase
  endfunction

  logic       ex, ok_tlb, ok_pte, use_hit;
  logic [2:0] ft_tlb, ft_pte, at;
  assign ex      = (client == 1'b0);          // instruction cache: execute access
  assign at      = {cur.we, ex, cur.sup};     // FSR access type
  assign ok_tlb  = acc_ok(t_acc, cur.sup, cur.we, ex);
  assign ok_pte  = acc_ok(pte_word[4:2], cur.sup, cur.we, ex);
  // user access to a supervisor-only page: privilege violation, else protection error
  assign ft_tlb  = (!cur.sup && t_acc[2:1] == 2'b11) ? 3'd3 : 3'd2;
  assign ft_pte  = (!cur.sup && pte_word[4:3] == 2'b11) ? 3'd3 : 3'd2;
  // a store through a clean page goes to the walk, which sets M in memory
  assign use_hit = t_hit && (ok_tlb ? !(cur.we && !t_m) : 1'b1);

  assign tlb_hit_pulse  = (state == S_XLATE) && r_en && use_hit;
  assign tlb_miss_pulse = (state == S_XLATE) && r_en && !use_hit;
  assign fault_pulse    = (state == S_FAULT);

  // index of the next table for a descriptor found at level l
  function automatic logic [7:0] next_index(input logic [1:0] l, input logic [31:0] va);
    case (l)
      2'd0:    return va[31:24];
      2'd1:    return {2'b00, va[23:18]};
      default: return {2'b00, va[17:12]};
    endcase
  endfunction

  // bus request
  always_comb begin
    bus_req_valid = 1'b0;
    bus_req       = '0;
    if (state == S_WREQ) begin
      bus_req_valid = 1'b1;
      bus_req.pa    = {walk_addr[PA_W-1:3], 3'b000};
      bus_req.be    = 8'hFF;
    end else if (state == S_PWREQ) begin
      bus_req_valid = 1'b1;
      bus_req.pa    = {walk_addr[PA_W-1:3], 3'b000};
      bus_req.we    = 1'b1;
      bus_req.be    = walk_addr[2] ? 8'h0F : 8'hF0;
      bus_req.wdata = {pte_q, pte_q};
    end else if (state == S_BUS) begin
      bus_req_valid = 1'b1;
      bus_req.pa    = pa;
      bus_req.we    = cur.we;
      bus_req.line  = cur.line;
      bus_req.be    = cur.be;
      bus_req.wdata = cur.wdata;
    end
  end

  // responses to the caches
  logic     rsp_v;
  mem_rsp_t rsp;
  always_comb begin
    rsp_v = 1'b0;
    rsp   = '0;
    if (state == S_BRSP && bus_rsp_valid) begin
      rsp_v      = 1'b1;
      rsp.rdata  = bus_rsp.rdata;
      rsp.last   = bus_rsp.last;
    end else if (state == S_FAULT) begin
      rsp_v    = 1'b1;
      rsp.last = 1'b1;
      rsp.err  = 1'b1;
    end
  end
  assign ic_rsp_valid = rsp_v && (client == 1'b0);
  assign dc_rsp_valid = rsp_v && (client == 1'b1);
  assign ic_rsp       = rsp;
  assign dc_rsp       = rsp;

  always_comb begin
    case (reg_addr)
      3'd0:    reg_rdata = {31'b0, r_en};
      3'd1:    reg_rdata = r_ctp;
      3'd2:    reg_rdata = {24'b0, r_ctx};
      3'd3:    reg_rdata = r_fsr;
      3'd4:    reg_rdata = r_far;
      default: reg_rdata = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      last      <= 1'b1;
      client    <= 1'b0;
      r_en      <= 1'b0;
      r_ctp     <= '0;
      r_ctx     <= '0;
      r_fsr     <= '0;
      r_far     <= '0;
      cur       <= '0;
      pa        <= '0;
      walk_addr <= '0;
      lvl       <= '0;
      pte_q     <= '0;
    end else begin
      if (reg_we) begin
        case (reg_addr)
          3'd0: r_en  <= reg_wdata[0];
          3'd1: r_ctp <= reg_wdata;
          3'd2: r_ctx <= reg_wdata[7:0];
          3'd3: r_fsr <= reg_wdata;
          3'd4: r_far <= reg_wdata;
          default: ;
        endcase
      end
      case (state)
        S_IDLE: if (ic_req_valid || dc_req_valid) begin
          client <= sel;
          last   <= sel;
          cur    <= sel ? dc_req : ic_req;
          state  <= S_XLATE;
        end
        S_XLATE: begin
          if (!r_en) begin
            pa    <= {4'b0, cur.va};
            state <= S_BUS;
          end else if (t_hit && !ok_tlb) begin
            r_fsr <= {22'b0, t_lvl, at, ft_tlb, 2'b10};
            r_far <= cur.va;
            state <= S_FAULT;
          end else if (use_hit) begin
            pa    <= t_pa;
            state <= S_BUS;
          end else begin
            lvl       <= 2'd0;
            walk_addr <= {r_ctp[31:2], 6'b0} + PA_W'({r_ctx, 2'b00});
            state     <= S_WREQ;
          end
        end
        S_WREQ: if (bus_req_ready) state <= S_WRSP;
        S_WRSP: if (bus_rsp_valid) begin
          if (pte_word[1:0] == 2'd2 && !ok_pte) begin
            r_fsr <= {22'b0, lvl, at, ft_pte, 2'b10};
            r_far <= cur.va;
            state <= S_FAULT;
          end else if (pte_word[1:0] == 2'd2) begin
            // set R, and M for a store; write the PTE back if that changed it
            pte_q <= pte_word | 32'h20 | (cur.we ? 32'h40 : 32'h0);
            if (!pte_word[5] || (cur.we && !pte_word[6])) state <= S_PWREQ;
            else                                          state <= S_TWR;
          end else if (pte_word[1:0] == 2'd1 && lvl != 2'd3) begin
            walk_addr <= {pte_word[31:2], 6'b0} + {26'b0, next_index(lvl, cur.va), 2'b00};
            lvl       <= lvl + 1'b1;
            state     <= S_WREQ;
          end else begin
            r_fsr <= {22'b0, lvl, at, (pte_word[1:0] == 2'd0) ? 3'd1 : 3'd4, 2'b10};
            r_far <= cur.va;
            state <= S_FAULT;
          end
        end
        S_PWREQ: if (bus_req_ready) state <= S_PWRSP;
        S_PWRSP: if (bus_rsp_valid) state <= S_TWR;
        S_TWR:   state <= S_XLATE;                     // TLB written, look up again
        S_BUS:  if (bus_req_ready) state <= S_BRSP;
        S_BRSP: if (bus_rsp_valid && bus_rsp.last) state <= S_IDLE;
        S_FAULT: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_one_client : assert property (@(posedge clk) disable iff (!rst_n)
    !(ic_req_ready && dc_req_ready));

endmodule
