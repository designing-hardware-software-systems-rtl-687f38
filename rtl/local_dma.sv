// local_dma: moves words between the interconnection network and the cores
// of one cluster.
//
// Down: a packet for this cluster (its cluster number, or broadcast) is
// delivered to the aF or bF input buffer of the addressed core, or of every
// core when broadcast, or handed to the local PE when it is configuration.
// A broadcast word moves only when every core can take it, so all cores get
// each word exactly once. accept tells the network whether this cluster
// takes the present packet (always high for packets meant for others).
// Up: the core named by up_sel_core sends its output buffer to the network.
//
// All paths are combinational; a word crosses from the network into a core's
// buffer in the clock it is offered. The paper gives the block's job
// (transfers to and from the cores); the routing rules are this design's.
module local_dma
  import mc_pkg::*;
#(
  parameter int unsigned N_CORES    = 4,
  parameter int unsigned CLUSTER_ID = 0
) (
  // from the network
  input  logic      dn_valid,
  input  down_pkt_t dn_pkt,
  output logic      accept,
  // to the cores' input buffers
  output logic      a_valid [N_CORES],
  input  logic      a_ready [N_CORES],
  output logic      b_valid [N_CORES],
  input  logic      b_ready [N_CORES],
  output word_t     core_data,
  // to the local PE
  output logic      pe_valid,
  input  logic      pe_ready,
  output down_pkt_t pe_pkt,
  // up: output buffers to the network
  input  logic [ID_W-1:0] up_sel_core,
  input  logic      o_valid [N_CORES],
  input  word_t     o_data  [N_CORES],
  output logic      o_ready [N_CORES],
  output logic      up_valid,
  output word_t     up_data,
  input  logic      up_ready
);

  logic mine, is_cfg, all_ready;
  logic tgt [N_CORES];

  always_comb begin
    mine   = dn_pkt.bcast || (dn_pkt.cluster == ID_W'(CLUSTER_ID));
    is_cfg = (dn_pkt.kind == PK_CFG) || (dn_pkt.kind == PK_START);
    all_ready = 1'b1;
    for (int i = 0; i < N_CORES; i++) begin
      tgt[i] = mine && !is_cfg && (dn_pkt.bcast || dn_pkt.core == ID_W'(i));
      if (tgt[i] && !((dn_pkt.kind == PK_A) ? a_ready[i] : b_ready[i])) all_ready = 1'b0;
    end
    accept = !mine || (is_cfg ? pe_ready : all_ready);
  end

  always_comb begin
    for (int i = 0; i < N_CORES; i++) begin
      a_valid[i] = dn_valid && tgt[i] && all_ready && (dn_pkt.kind == PK_A);
      b_valid[i] = dn_valid && tgt[i] && all_ready && (dn_pkt.kind == PK_B);
    end
    core_data = dn_pkt.data;
    pe_valid  = dn_valid && mine && is_cfg;
    pe_pkt    = dn_pkt;
  end

  always_comb begin
    up_valid = 1'b0;
    up_data  = '0;
    for (int i = 0; i < N_CORES; i++) begin
      o_ready[i] = up_ready && (up_sel_core == ID_W'(i));
      if (up_sel_core == ID_W'(i)) begin
        up_valid = o_valid[i];
        up_data  = o_data[i];
      end
    end
  end

endmodule
