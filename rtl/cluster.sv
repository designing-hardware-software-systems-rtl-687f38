// cluster: a group of cores with their local PE and local DMA.
//
// The local DMA takes words from the interconnection network into the cores'
// input buffers (or to the local PE for configuration) and sends the output
// buffer of the selected core back to the network. The local PE writes the
// cores' microprograms and starts them. The cores then compute on their own.
//
// Interface: the network side of local_dma (dn_*, accept, up_*), per-core
// busy and done, and per-core event strobes for performance counting.
//
// The paper's cluster also holds a shared memory, whose use it does not
// describe; it is not part of this model. Numbers of cores and memory sizes
// are parameters.
module cluster
  import mc_pkg::*;
#(
  parameter int unsigned CLUSTER_ID = 0,
  parameter int unsigned N_CORES    = 4,
  parameter int unsigned LMEM_WORDS = 8192,
  parameter int unsigned BBUF_X     = 64,
  parameter int unsigned CFG_WORDS  = 32,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      dn_valid,
  input  down_pkt_t dn_pkt,
  output logic      accept,
  input  logic [ID_W-1:0] up_sel_core,
  output logic      up_valid,
  output word_t     up_data,
  input  logic      up_ready,
  output logic      core_busy     [N_CORES],
  output logic      core_done     [N_CORES],
  output logic      ev_fma        [N_CORES],
  output logic      ev_raw_stall  [N_CORES],
  output logic      ev_overlap    [N_CORES]
);

  localparam int unsigned CAW = $clog2(CFG_WORDS);

  logic      a_valid [N_CORES], a_ready [N_CORES], b_valid [N_CORES], b_ready [N_CORES];
  logic      o_valid [N_CORES], o_ready [N_CORES];
  word_t     o_data  [N_CORES];
  word_t     core_data, cfg_wdata;
  logic      pe_valid, pe_ready;
  down_pkt_t pe_pkt;
  logic      cfg_we [N_CORES], start [N_CORES];
  logic [CAW-1:0] cfg_waddr [N_CORES];

  local_dma #(.N_CORES(N_CORES), .CLUSTER_ID(CLUSTER_ID)) u_ldma (
    .dn_valid, .dn_pkt, .accept,
    .a_valid, .a_ready, .b_valid, .b_ready, .core_data,
    .pe_valid, .pe_ready, .pe_pkt,
    .up_sel_core, .o_valid, .o_data, .o_ready, .up_valid, .up_data, .up_ready);

  local_pe #(.N_CORES(N_CORES), .CFG_WORDS(CFG_WORDS)) u_lpe (
    .clk, .rst_n, .pkt_valid(pe_valid), .pkt_ready(pe_ready), .pkt(pe_pkt),
    .cfg_we, .cfg_waddr, .cfg_wdata, .start);

  for (genvar i = 0; i < N_CORES; i++) begin : g_core
    core #(.LMEM_WORDS(LMEM_WORDS), .BBUF_X(BBUF_X), .CFG_WORDS(CFG_WORDS),
           .FIFO_DEPTH(FIFO_DEPTH)) u_core (
      .clk, .rst_n,
      .a_in_valid(a_valid[i]), .a_in_ready(a_ready[i]), .a_in_data(core_data),
      .b_in_valid(b_valid[i]), .b_in_ready(b_ready[i]), .b_in_data(core_data),
      .o_out_valid(o_valid[i]), .o_out_ready(o_ready[i]), .o_out_data(o_data[i]),
      .cfg_we(cfg_we[i]), .cfg_waddr(cfg_waddr[i]), .cfg_wdata(cfg_wdata),
      .start(start[i]), .busy(core_busy[i]), .done(core_done[i]),
      .ev_fma(ev_fma[i]), .ev_raw_stall(ev_raw_stall[i]), .ev_overlap(ev_overlap[i]));
  end

endmodule
