// manycore: the many-core coprocessor, top level.
//
// The coprocessor sits beside a host processor and external memory. The
// host queues micro instructions for the central DMA; the DMA reads external
// memory (through its cache when the reads are not sequential) and sends the
// words over the interconnection network to the clusters, and writes the
// cores' results back to memory. Each cluster has a local PE that loads and
// starts the cores' microprograms, a local DMA that delivers words into the
// cores' input buffers and collects their output buffers, and the cores, each
// a fused multiply-add unit with its own local memory.
//
// Ports: host instruction streams and status, the external memory ports (a
// burst read port and a word write port, plain valid/ready in place of the
// AXI links of the original system), per-core busy flags and performance
// counters (mc_pkg::perf_t).
//
// Default size: 4 clusters of 4 cores (16 cores), 32 KB of local memory per
// core, a 16-line DMA cache: the 16-core configuration evaluated for dense
// matrix multiplication. The grouping of the 16 cores into clusters is this
// design's choice.
module manycore
  import mc_pkg::*;
#(
  parameter int unsigned N_CLUSTERS        = 4,
  parameter int unsigned CORES_PER_CLUSTER = 4,
  parameter int unsigned LMEM_WORDS        = 8192,
  parameter int unsigned BBUF_X            = 64,
  parameter int unsigned CFG_WORDS         = 32,
  parameter int unsigned FIFO_DEPTH        = 16,
  parameter int unsigned N_LINES           = 16,
  parameter int unsigned LINE_WORDS        = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // host
  input  logic              rd_instr_valid,
  output logic              rd_instr_ready,
  input  dma_rd_instr_t     rd_instr,
  input  logic              wr_instr_valid,
  output logic              wr_instr_ready,
  input  dma_wr_instr_t     wr_instr,
  input  logic              cache_flush,
  output logic              rd_idle,
  output logic              wr_idle,
  output logic [31:0]       rd_done_cnt,
  output logic [31:0]       wr_done_cnt,
  output logic              core_busy [N_CLUSTERS][CORES_PER_CLUSTER],
  output perf_t             perf,
  // external memory
  output logic              mem_rd_req_valid,
  input  logic              mem_rd_req_ready,
  output logic [ADDR_W-1:0] mem_rd_req_addr,
  output logic [7:0]        mem_rd_req_len,
  input  logic              mem_rd_rvalid,
  input  word_t             mem_rd_rdata,
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [ADDR_W-1:0] mem_wr_addr,
  output word_t             mem_wr_data
);

  localparam int unsigned CPC = CORES_PER_CLUSTER;

  logic      dn_valid, dn_ready, up_valid, up_ready;
  down_pkt_t dn_pkt, cl_dn_pkt;
  word_t     up_data;
  logic [ID_W-1:0] up_sel_cluster, up_sel_core, cl_up_sel_core;
  logic      cl_dn_valid;
  logic      cl_accept   [N_CLUSTERS];
  logic      cl_up_valid [N_CLUSTERS], cl_up_ready [N_CLUSTERS];
  word_t     cl_up_data  [N_CLUSTERS];
  logic      core_done   [N_CLUSTERS][CPC];
  logic      ev_fma      [N_CLUSTERS][CPC];
  logic      ev_stall    [N_CLUSTERS][CPC];
  logic      ev_ovl      [N_CLUSTERS][CPC];
  logic      ev_hit, ev_miss, ev_burst, ev_dn_stall;

  dma #(.N_LINES(N_LINES), .LINE_WORDS(LINE_WORDS)) u_dma (
    .clk, .rst_n,
    .rd_instr_valid, .rd_instr_ready, .rd_instr,
    .wr_instr_valid, .wr_instr_ready, .wr_instr,
    .cache_flush, .rd_idle, .wr_idle, .rd_done_cnt, .wr_done_cnt,
    .mem_rd_req_valid, .mem_rd_req_ready, .mem_rd_req_addr, .mem_rd_req_len,
    .mem_rd_rvalid, .mem_rd_rdata,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data,
    .dn_valid, .dn_ready, .dn_pkt,
    .up_sel_cluster, .up_sel_core, .up_valid, .up_ready, .up_data,
    .ev_hit, .ev_miss, .ev_burst, .ev_dn_stall);

  icn_bus #(.N_CLUSTERS(N_CLUSTERS)) u_net (
    .clk, .rst_n,
    .dn_valid, .dn_ready, .dn_pkt,
    .cl_dn_valid, .cl_dn_pkt, .cl_accept,
    .up_sel_cluster, .up_sel_core, .cl_up_sel_core,
    .cl_up_valid, .cl_up_data, .cl_up_ready,
    .up_valid, .up_data, .up_ready);

  for (genvar c = 0; c < N_CLUSTERS; c++) begin : g_cl
    cluster #(.CLUSTER_ID(c), .N_CORES(CPC), .LMEM_WORDS(LMEM_WORDS), .BBUF_X(BBUF_X),
              .CFG_WORDS(CFG_WORDS), .FIFO_DEPTH(FIFO_DEPTH)) u_cl (
      .clk, .rst_n,
      .dn_valid(cl_dn_valid), .dn_pkt(cl_dn_pkt), .accept(cl_accept[c]),
      .up_sel_core(cl_up_sel_core), .up_valid(cl_up_valid[c]), .up_data(cl_up_data[c]),
      .up_ready(cl_up_ready[c]),
      .core_busy(core_busy[c]), .core_done(core_done[c]),
      .ev_fma(ev_fma[c]), .ev_raw_stall(ev_stall[c]), .ev_overlap(ev_ovl[c]));
  end

  // Performance counters.
  logic [31:0] n_fma, n_stall, n_ovl;
  always_comb begin
    n_fma = '0; n_stall = '0; n_ovl = '0;
    for (int c = 0; c < N_CLUSTERS; c++)
      for (int i = 0; i < CPC; i++) begin
        n_fma   += 32'(ev_fma[c][i]);
        n_stall += 32'(ev_stall[c][i]);
        n_ovl   += 32'(ev_ovl[c][i]);
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      perf <= '0;
    end else begin
      perf.fma_ops      <= perf.fma_ops + n_fma;
      perf.raw_stalls   <= perf.raw_stalls + n_stall;
      perf.overlaps     <= perf.overlaps + n_ovl;
      perf.cache_hits   <= perf.cache_hits + 32'(ev_hit);
      perf.cache_misses <= perf.cache_misses + 32'(ev_miss);
      perf.bursts       <= perf.bursts + 32'(ev_burst);
      perf.net_stalls   <= perf.net_stalls + 32'(ev_dn_stall);
    end
  end

endmodule
