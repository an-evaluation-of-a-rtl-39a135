// sys_mem_model: behavioural model of the system bus memory (the DRAM
// controller and DRAM behind the processor). Testbench only. Requests are
// taken one at a time. A line read returns BEATS beats starting LAT cycles
// after the request, one per cycle; with LAT = 22 a line takes 30 cycles,
// the miss penalty of the evaluation system. A single read returns one beat
// after LAT cycles, a write one acknowledge after WLAT cycles. WORDS double
// words are modelled, addressed by pa[3 +: log2(WORDS)]; the testbench may
// use `mem` directly (e.g. to place page tables).
module sys_mem_model
  import dt_pkg::*;
#(
  parameter int unsigned WORDS = 65536,
  parameter int unsigned LAT   = 22,
  parameter int unsigned WLAT  = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  bus_req_t req,
  output logic     rsp_valid,
  output bus_rsp_t rsp
);
  localparam int unsigned AW = $clog2(WORDS);
  logic [DW-1:0] mem [WORDS];
  int unsigned   reads, writes, line_reads;

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
    reads = 0; writes = 0; line_reads = 0;
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
        bus_req_t      r;
        logic [AW-1:0] a;
        r = req;
        busy <= 1'b1;
        a = r.pa[3 +: AW];
        if (r.we) begin
          writes++;
          repeat (WLAT) @(posedge clk);
          for (int b = 0; b < 8; b++) if (r.be[b]) mem[a][8*b +: 8] = r.wdata[8*b +: 8];
          rsp_valid <= 1'b1; rsp <= '{rdata: '0, last: 1'b1};
          @(posedge clk);
        end else if (r.line) begin
          line_reads++;
          repeat (LAT) @(posedge clk);
          for (int k = 0; k < BEATS; k++) begin
            rsp_valid <= 1'b1;
            rsp <= '{rdata: mem[{a[AW-1:3], 3'(k)}], last: (k == BEATS-1)};
            @(posedge clk);
          end
        end else begin
          reads++;
          repeat (LAT) @(posedge clk);
          rsp_valid <= 1'b1; rsp <= '{rdata: mem[a], last: 1'b1};
          @(posedge clk);
        end
        rsp_valid <= 1'b0;
        busy      <= 1'b0;
      end
    end
  end
endmodule
