// icn_bus: the interconnection network between the central DMA and the
// clusters.
//
// The network is a broadcast bus with a registered two-entry buffer at its
// input. Down: every word from the DMA is shown to all clusters at once;
// each cluster's accept says it takes the word or that the word is not for
// it, and the word leaves the buffer when all clusters accept, so a word
// broadcast to every core is delivered once to each. Up: the DMA write
// module names the cluster and core whose output it wants; the network
// passes that core's stream (selected in the cluster by its local DMA) back.
//
// Latency: a word reaches the clusters one clock after the DMA offers it;
// one word per clock in each direction.
//
// The paper lets the network be a bus, a crossbar, a ring, a network-on-chip
// or point-to-point links and does not say which was used in its results;
// the bus is this design's choice.
module icn_bus
  import mc_pkg::*;
#(
  parameter int unsigned N_CLUSTERS = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  // from the DMA read module
  input  logic      dn_valid,
  output logic      dn_ready,
  input  down_pkt_t dn_pkt,
  // to the clusters
  output logic      cl_dn_valid,
  output down_pkt_t cl_dn_pkt,
  input  logic      cl_accept [N_CLUSTERS],
  // up, selected by the DMA write module
  input  logic [ID_W-1:0] up_sel_cluster,
  input  logic [ID_W-1:0] up_sel_core,
  output logic [ID_W-1:0] cl_up_sel_core,
  input  logic      cl_up_valid [N_CLUSTERS],
  input  word_t     cl_up_data  [N_CLUSTERS],
  output logic      cl_up_ready [N_CLUSTERS],
  output logic      up_valid,
  output word_t     up_data,
  input  logic      up_ready
);

  logic      q_valid, all_accept;
  down_pkt_t q_pkt;
  logic [1:0] q_level;

  sync_fifo #(.T(down_pkt_t), .DEPTH(2)) u_dnq (
    .clk, .rst_n, .wr_valid(dn_valid), .wr_ready(dn_ready), .wr_data(dn_pkt),
    .rd_valid(q_valid), .rd_ready(all_accept), .rd_data(q_pkt), .level(q_level));

  always_comb begin
    all_accept = 1'b1;
    for (int i = 0; i < N_CLUSTERS; i++) all_accept &= cl_accept[i];
  end

  always_comb begin
    cl_dn_valid = q_valid && all_accept;
    cl_dn_pkt   = q_pkt;

    cl_up_sel_core = up_sel_core;
    up_valid = 1'b0;
    up_data  = '0;
    for (int i = 0; i < N_CLUSTERS; i++) begin
      cl_up_ready[i] = up_ready && (up_sel_cluster == ID_W'(i));
      if (up_sel_cluster == ID_W'(i)) begin
        up_valid = cl_up_valid[i];
        up_data  = cl_up_data[i];
      end
    end
  end

endmodule
