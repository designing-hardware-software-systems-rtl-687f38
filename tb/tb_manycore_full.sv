// tb_manycore_full: end-to-end run of the coprocessor at its default size
// (4 clusters of 4 cores, 32 KB of local memory per core, 16-line DMA
// cache). The host program computes a 32 x 32 dense matrix product with the
// broadcast block algorithm (x = 2 columns per core, y = 16 rows, two row
// blocks) and a 61 x 40 sparse matrix-vector product, and checks both
// results exactly.
module tb_manycore_full;
  import mc_pkg::*;

  localparam int NCL = 4, CPC = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          rd_instr_valid = 0, rd_instr_ready, wr_instr_valid = 0, wr_instr_ready;
  dma_rd_instr_t rd_instr = '0;
  dma_wr_instr_t wr_instr = '0;
  logic          cache_flush = 0, rd_idle, wr_idle;
  logic [31:0]   rd_done_cnt, wr_done_cnt;
  logic          core_busy [NCL][CPC];
  perf_t         perf;
  logic          mem_rd_req_valid, mem_rd_req_ready, mem_rd_rvalid, mem_wr_valid, mem_wr_ready;
  logic [31:0]   mem_rd_req_addr, mem_rd_rdata, mem_wr_addr, mem_wr_data;
  logic [7:0]    mem_rd_req_len;

  manycore dut (.*);

  ext_mem_model #(.WORDS(1 << 15), .LATENCY(10)) u_mem (
    .clk, .rst_n, .rd_req_valid(mem_rd_req_valid), .rd_req_ready(mem_rd_req_ready),
    .rd_req_addr(mem_rd_req_addr), .rd_req_len(mem_rd_req_len),
    .rvalid(mem_rd_rvalid), .rdata(mem_rd_rdata),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  `include "mc_host.svh"

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog: rd_done %0d wr_done %0d", rd_done_cnt, wr_done_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    run_matmul(32, 2, 16, 0);
    run_spmv(61, 40, 15, 8192);
    $display("A broadcasts %0d, cache hits %0d, misses %0d, bursts %0d, B overlaps %0d",
             n_bcast, perf.cache_hits, perf.cache_misses, perf.bursts, perf.overlaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
