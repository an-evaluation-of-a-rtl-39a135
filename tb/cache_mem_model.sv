// cache_mem_model: behavioural stand-in for the MMU plus memory, seen from a
// cache (mem_req_t/mem_rsp_t channel, virtual = physical address). Testbench
// only. A line read returns BEATS beats starting LAT cycles after the request
// is taken, one per cycle; a single read or a write answers once after LAT
// cycles. Requests are taken one at a time. Memory is WORDS double words,
// addressed by va[3 +: log2(WORDS)]; the testbench may read and write `mem`
// directly. Setting `err_va_hi` makes accesses with va[31:28] equal to it
// answer with err.
module cache_mem_model
  import dt_pkg::*;
#(
  parameter int unsigned WORDS = 4096,
  parameter int unsigned LAT   = 22
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mem_rsp_t rsp,
  input  logic [3:0] err_va_hi,
  input  logic     err_en
);
  localparam int unsigned AW = $clog2(WORDS);
  logic [DW-1:0] mem [WORDS];
  int unsigned   reqs, writes, line_reads;

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = {32'(i), 32'(i) ^ 32'hA5A5_0000};
    reqs = 0; writes = 0; line_reads = 0;
  end

  logic busy;
  assign req_ready = !busy && rst_n;

  initial begin
    busy      = 1'b0;
    rsp_valid = 1'b0;
    rsp       = '0;
    forever begin
      @(posedge clk);
      if (req_valid && req_ready) begin
        mem_req_t r;
        logic [AW-1:0] a;
        logic          e;
        r = req;
        busy <= 1'b1;
        reqs++;
        a = r.va[3 +: AW];
        e = err_en && (r.va[31:28] == err_va_hi);
        repeat (LAT) @(posedge clk);
        if (r.we) begin
          writes++;
          if (!e)
            for (int b = 0; b < 8; b++) if (r.be[b]) mem[a][8*b +: 8] = r.wdata[8*b +: 8];
          rsp_valid <= 1'b1; rsp <= '{rdata: '0, last: 1'b1, err: e};
          @(posedge clk);
        end else if (r.line) begin
          line_reads++;
          for (int k = 0; k < BEATS; k++) begin
            rsp_valid <= 1'b1;
            rsp <= '{rdata: mem[{a[AW-1:3], 3'(k)}], last: (k == BEATS-1), err: e};
            @(posedge clk);
          end
        end else begin
          rsp_valid <= 1'b1; rsp <= '{rdata: mem[a], last: 1'b1, err: e};
          @(posedge clk);
        end
        rsp_valid <= 1'b0;
        busy      <= 1'b0;
      end
    end
  end
endmodule
