// tb_matmul_workload: dense matrix product on the coprocessor at its default
// size (16 cores, 8192 words of local memory each, 16-line DMA cache) with
// the block shape the local memory was sized for: x = 22 columns of C per
// core and y = 352 rows, so each core holds a 352 x 22 block (7744 of its
// 8192 words). With L = 8192 words and p = 16 cores the communication-optimal
// shape is x = L / (2 + sqrt(pL)) = 22 and y = sqrt(pL) = 362; y is rounded
// to 352 so that n = 352 tiles exactly (one tile of 16 x 22 columns). The
// full 1024 x 1024 product the design was evaluated with is 27 times longer
// and is not run here.
// The testbench checks every element of C exactly and measures the
// efficiency: multiply-adds over (cycles x 16 cores). A core issues one
// multiply-add per clock when fed, so the efficiency shows how well the DMA,
// its cache and the broadcast bus keep 16 cores busy; it must reach 80 %.
module tb_matmul_workload;
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

  ext_mem_model #(.WORDS(1 << 19), .LATENCY(10)) u_mem (
    .clk, .rst_n, .rd_req_valid(mem_rd_req_valid), .rd_req_ready(mem_rd_req_ready),
    .rd_req_addr(mem_rd_req_addr), .rd_req_len(mem_rd_req_len),
    .rvalid(mem_rd_rvalid), .rdata(mem_rd_rdata),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  `include "mc_host.svh"

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog: rd_done %0d wr_done %0d", rd_done_cnt, wr_done_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint c0, c1;
    real eff;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    c0 = cycle;
    run_matmul(352, 22, 352, 0);
    c1 = cycle;
    eff = real'(perf.fma_ops) / (real'(c1 - c0) * 16.0);
    $display("352 x 352 product: %0d clocks, efficiency %0.1f %%, cache hits %0d misses %0d, bus stalls %0d",
             c1 - c0, 100.0 * eff, perf.cache_hits, perf.cache_misses, perf.net_stalls);
    check(eff >= 0.80, "efficiency below 80 %");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
