// dma: the central DMA between external memory and the many-core network.
//
// The host processor queues micro instructions for the DMA: read
// instructions (memory to cores, also used to send microprograms and start
// packets) and write instructions (a core's results to memory). The DMA is
// two independent modules, dma_read and dma_write, each with its own
// instruction queue, so reading and writing go on at the same time. The read
// module has the cache that serves non-sequential reads.
//
// Interface: two instruction streams from the host (valid/ready), a cache
// flush input, status (idle flags and counts of finished instructions), the
// memory ports (burst read, word write), and the network ports (down packet
// stream, up selection and data stream). Event strobes count cache hits and
// misses, sequential bursts and cycles in which the network held off a packet.
//
// The paper's DMA is programmed through a general-purpose AXI port and reaches
// memory through AXI; here both are plain valid/ready ports.
module dma
  import mc_pkg::*;
#(
  parameter int unsigned N_LINES    = 16,
  parameter int unsigned LINE_WORDS = 8,
  parameter int unsigned MAX_BURST  = 16,
  parameter int unsigned BUF_DEPTH  = 32,
  parameter int unsigned IQ_DEPTH   = 16
) (
  input  logic              clk,
  input  logic              rst_n,
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
  output logic              mem_rd_req_valid,
  input  logic              mem_rd_req_ready,
  output logic [ADDR_W-1:0] mem_rd_req_addr,
  output logic [7:0]        mem_rd_req_len,
  input  logic              mem_rd_rvalid,
  input  word_t             mem_rd_rdata,
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [ADDR_W-1:0] mem_wr_addr,
  output word_t             mem_wr_data,
  output logic              dn_valid,
  input  logic              dn_ready,
  output down_pkt_t         dn_pkt,
  output logic [ID_W-1:0]   up_sel_cluster,
  output logic [ID_W-1:0]   up_sel_core,
  input  logic              up_valid,
  output logic              up_ready,
  input  word_t             up_data,
  output logic              ev_hit,
  output logic              ev_miss,
  output logic              ev_burst,
  output logic              ev_dn_stall
);

  localparam int unsigned QW = $clog2(IQ_DEPTH+1);

  logic          rq_valid, rq_ready, wq_valid, wq_ready;
  dma_rd_instr_t rq_instr;
  dma_wr_instr_t wq_instr;
  logic [QW-1:0] rq_level, wq_level;
  logic          r_idle, w_idle, r_done, w_done;

  sync_fifo #(.T(dma_rd_instr_t), .DEPTH(IQ_DEPTH)) u_rq (
    .clk, .rst_n, .wr_valid(rd_instr_valid), .wr_ready(rd_instr_ready), .wr_data(rd_instr),
    .rd_valid(rq_valid), .rd_ready(rq_ready), .rd_data(rq_instr), .level(rq_level));

  sync_fifo #(.T(dma_wr_instr_t), .DEPTH(IQ_DEPTH)) u_wq (
    .clk, .rst_n, .wr_valid(wr_instr_valid), .wr_ready(wr_instr_ready), .wr_data(wr_instr),
    .rd_valid(wq_valid), .rd_ready(wq_ready), .rd_data(wq_instr), .level(wq_level));

  dma_read #(.N_LINES(N_LINES), .LINE_WORDS(LINE_WORDS), .MAX_BURST(MAX_BURST),
             .BUF_DEPTH(BUF_DEPTH)) u_rd (
    .clk, .rst_n, .cache_flush,
    .in_valid(rq_valid), .in_ready(rq_ready), .in_instr(rq_instr),
    .mem_req_valid(mem_rd_req_valid), .mem_req_ready(mem_rd_req_ready),
    .mem_req_addr(mem_rd_req_addr), .mem_req_len(mem_rd_req_len),
    .mem_rvalid(mem_rd_rvalid), .mem_rdata(mem_rd_rdata),
    .dn_valid, .dn_ready, .dn_pkt,
    .idle(r_idle), .done(r_done), .ev_hit, .ev_miss, .ev_burst);

  dma_write u_wr (
    .clk, .rst_n,
    .in_valid(wq_valid), .in_ready(wq_ready), .in_instr(wq_instr),
    .up_sel_cluster, .up_sel_core, .up_valid, .up_ready, .up_data,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data,
    .idle(w_idle), .done(w_done));

  assign rd_idle     = r_idle && (rq_level == '0);
  assign wr_idle     = w_idle && (wq_level == '0);
  assign ev_dn_stall = dn_valid && !dn_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_done_cnt <= '0;
      wr_done_cnt <= '0;
    end else begin
      if (r_done) rd_done_cnt <= rd_done_cnt + 1'b1;
      if (w_done) wr_done_cnt <= wr_done_cnt + 1'b1;
    end
  end

endmodule
