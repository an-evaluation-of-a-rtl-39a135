// tlb: translation buffer of the shared MMU.
//
// ENTRIES entries, WAYS-way set associative (the paper's 256 entries, 8-way,
// so 32 sets). An entry holds a SPARC V8 reference-MMU page table entry: the
// virtual page number va[31:12], the context number, the page level (0: the
// whole 4 GB context, 1: 16 MB region, 2: 256 KB segment, 3: 4 KB page), the
// physical page number PA[35:12], the access bits ACC and the modified bit M
// (so that the first store to a clean page can be sent to the table walk,
// which sets M in memory).
//
// Lookup is combinational: the set is chosen by va[12 +: log2(SETS)], and a way
// hits when it is valid, its context matches and its virtual page number
// matches in the bits the page level covers. The physical address is the PPN
// with the page offset taken from the virtual address at that level. A large
// page is filed under the set of the address whose miss loaded it; another
// address of the same page in another set misses and loads its own copy.
//
// Writes (from the table walk) replace an entry that already maps the page,
// otherwise go to a way chosen by a per-set round-robin pointer. `flush` invalidates all entries in one cycle. Entry count and
// associativity are the paper's; indexing, replacement and flush are this
// design's choices.
module tlb
  import dt_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned WAYS    = 8,
  parameter int unsigned CTX_W   = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  // lookup
  input  logic [VA_W-1:0]   lk_va,
  input  logic [CTX_W-1:0]  lk_ctx,
  output logic              lk_hit,
  output logic [PA_W-1:0]   lk_pa,
  output logic [2:0]        lk_acc,
  output logic              lk_m,     // modified bit of the entry
  output logic [1:0]        lk_lvl,
  // fill
  input  logic              wr_en,
  input  logic [VA_W-1:0]   wr_va,
  input  logic [CTX_W-1:0]  wr_ctx,
  input  logic [1:0]        wr_lvl,
  input  logic [23:0]       wr_ppn,
  input  logic [2:0]        wr_acc,
  input  logic              wr_m
);

  localparam int unsigned SETS = ENTRIES / WAYS;
  localparam int unsigned SW   = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WW   = $clog2(WAYS);

  typedef struct packed {
    logic [19:0]      vpn;
    logic [CTX_W-1:0] ctx;
    logic [1:0]       lvl;
    logic [23:0]      ppn;
    logic [2:0]       acc;
    logic             m;
  } tlb_entry_t;

  tlb_entry_t         ent [SETS][WAYS];
  logic [WAYS-1:0]    vld [SETS];
  logic [WW-1:0]      rr  [SETS];

  function automatic logic [19:0] lvl_mask(input logic [1:0] lvl);
    case (lvl)
      2'd0:    return 20'h00000;
      2'd1:    return 20'hFF000;
      2'd2:    return 20'hFFFC0;
      default: return 20'hFFFFF;
    endcase
  endfunction

  logic [SW-1:0] lk_set, wr_set;
  assign lk_set = SW'(lk_va[12 +: SW]);
  assign wr_set = SW'(wr_va[12 +: SW]);

  always_comb begin
    lk_hit = 1'b0;
    lk_pa  = '0;
    lk_acc = '0;
    lk_m   = 1'b0;
    lk_lvl = '0;
    for (int w = 0; w < WAYS; w++) begin
      tlb_entry_t e;
      logic [19:0] m;
      e = ent[lk_set][w];
      m = lvl_mask(e.lvl);
      if (vld[lk_set][w] && e.ctx == lk_ctx && ((e.vpn ^ lk_va[31:12]) & m) == '0) begin
        lk_hit = 1'b1;
        lk_acc = e.acc;
        lk_m   = e.m;
        lk_lvl = e.lvl;
        // PA[35:12] from the PPN where the level maps it, else from the VA
        lk_pa  = {(e.ppn & {4'hF, m}) | ({4'h0, lk_va[31:12]} & ~{4'hF, m}), lk_va[11:0]};
      end
    end
  end

  // a write replaces an entry that already maps the page (a refill that sets
  // the modified bit), otherwise the round-robin way
  logic          wr_hit;
  logic [WW-1:0] wr_way;
  always_comb begin
    wr_hit = 1'b0;
    wr_way = rr[wr_set];
    for (int w = 0; w < WAYS; w++) begin
      tlb_entry_t e;
      e = ent[wr_set][w];
      if (vld[wr_set][w] && e.ctx == wr_ctx && ((e.vpn ^ wr_va[31:12]) & lvl_mask(e.lvl)) == '0) begin
        wr_hit = 1'b1;
        wr_way = WW'(w);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        vld[s] <= '0;
        rr[s]  <= '0;
      end
    end else if (flush) begin
      for (int s = 0; s < SETS; s++) vld[s] <= '0;
    end else if (wr_en) begin
      vld[wr_set][wr_way] <= 1'b1;
      if (!wr_hit) rr[wr_set] <= rr[wr_set] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !flush)
      ent[wr_set][wr_way] <= '{vpn: wr_va[31:12], ctx: wr_ctx, lvl: wr_lvl,
                               ppn: wr_ppn, acc: wr_acc, m: wr_m};
  end

endmodule
