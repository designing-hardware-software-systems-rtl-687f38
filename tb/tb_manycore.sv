// tb_manycore: end-to-end test of the coprocessor at a reduced size
// (2 clusters of 2 cores, 1 KB of local memory each). The host program runs
// a dense matrix product with the broadcast block algorithm (two row blocks,
// so a core is restarted while its previous results are still being
// written), then a sparse matrix-vector product with rows given to the cores
// round robin. Results are compared exactly, and every mechanism (broadcast,
// DMA cache hits and misses, sequential bursts, B double buffering,
// back-pressure, simultaneous reads and writes) must have occurred.
module tb_manycore;
  import mc_pkg::*;

  localparam int NCL = 2, CPC = 2;

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

  manycore #(.N_CLUSTERS(NCL), .CORES_PER_CLUSTER(CPC), .LMEM_WORDS(256), .BBUF_X(8),
             .FIFO_DEPTH(4)) dut (.*);

  ext_mem_model #(.WORDS(1 << 14), .LATENCY(10)) u_mem (
    .clk, .rst_n, .rd_req_valid(mem_rd_req_valid), .rd_req_ready(mem_rd_req_ready),
    .rd_req_addr(mem_rd_req_addr), .rd_req_len(mem_rd_req_len),
    .rvalid(mem_rd_rvalid), .rdata(mem_rd_rdata),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  `include "mc_host.svh"

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog: rd_done %0d wr_done %0d", rd_done_cnt, wr_done_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    run_matmul(16, 4, 8, 0);
    run_spmv(23, 17, 30, 4096);
    check_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
