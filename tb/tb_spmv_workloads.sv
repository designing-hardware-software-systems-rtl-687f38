// tb_spmv_workloads: sparse matrix-vector products shaped like two of the
// published test matrices, on a coprocessor of one cluster with two cores
// (the two-core configuration the sparse results were measured on), every
// other parameter at its default (32 KB local memory per core, 16 cache
// lines). The matrices are random with the published shape:
//   - 91 x 3432 with about 23 % nonzeros: 91 rows and 21 nonzeros in each
//     column, 72072 nonzeros, the shape of BIBD_14_7;
//   - 555 x 350 with about 2 % nonzeros: 555 rows and about 4000 nonzeros,
//     near the 4357 of Maragal_2 (its column count of 350 is not in the
//     published table but is the matrix's known size).
// Every result is compared exactly with an integer reference, and the
// number of clocks is printed next to the published 100 MHz run time
// (143 800 and 9 400 clocks) for comparison; the memory model here gives one
// word per clock after a fixed latency, so the two are not expected to agree.
module tb_spmv_workloads;
  import mc_pkg::*;

  localparam int NCL = 1, CPC = 2;

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

  manycore #(.N_CLUSTERS(NCL), .CORES_PER_CLUSTER(CPC)) dut (.*);

  ext_mem_model #(.WORDS(1 << 18), .LATENCY(10)) u_mem (
    .clk, .rst_n, .rd_req_valid(mem_rd_req_valid), .rd_req_ready(mem_rd_req_ready),
    .rd_req_addr(mem_rd_req_addr), .rd_req_len(mem_rd_req_len),
    .rvalid(mem_rd_rvalid), .rdata(mem_rd_rdata),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  `include "mc_host.svh"

  initial begin
    #40_000_000;
    failures++;
    $display("watchdog: rd_done %0d wr_done %0d", rd_done_cnt, wr_done_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int f0;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    f0 = int'(perf.fma_ops);
    run_spmv(91, 3432, 23, 0);
    $display("BIBD_14_7 shape: %0d nonzeros multiplied (published 72072)", int'(perf.fma_ops) - f0);
    check(int'(perf.fma_ops) - f0 > 55000 && int'(perf.fma_ops) - f0 < 85000, "BIBD_14_7 nonzero count near 72072");
    f0 = int'(perf.fma_ops);
    run_spmv(555, 350, 2, 0);
    $display("Maragal_2 shape: %0d nonzeros multiplied (published 4357)", int'(perf.fma_ops) - f0);
    check(int'(perf.fma_ops) - f0 > 3000 && int'(perf.fma_ops) - f0 < 5000, "Maragal_2 nonzero count near 4357");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
