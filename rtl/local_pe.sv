// local_pe: the cluster's local processing element, which programs the
// cores of its cluster.
//
// Configuration words come from the network as PK_CFG packets. For each core
// the local PE keeps a write pointer into that core's configuration memory;
// each PK_CFG word addressed to the core (or broadcast) is written at the
// pointer, which then advances. A PK_START packet starts the addressed
// cores' programs and resets their pointers, so the next program is written
// from word 0. A broadcast program is thus written into every core at once,
// which is how the same microprogram reaches all cores.
//
// Interface: pkt_valid/pkt with pkt_ready always high (one packet per
// clock); per core a configuration write port and a start pulse, both
// registered (one clock after the packet).
//
// The paper gives this block's purpose (a light processor that programs the
// cores) but not its insides; this is the simplest unit that does that job.
module local_pe
  import mc_pkg::*;
#(
  parameter int unsigned N_CORES   = 4,
  parameter int unsigned CFG_WORDS = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      pkt_valid,
  output logic      pkt_ready,
  input  down_pkt_t pkt,
  output logic      cfg_we   [N_CORES],
  output logic [$clog2(CFG_WORDS)-1:0] cfg_waddr [N_CORES],
  output word_t     cfg_wdata,
  output logic      start    [N_CORES]
);

  localparam int unsigned CAW = $clog2(CFG_WORDS);

  logic [CAW-1:0] wp [N_CORES];

  assign pkt_ready = 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CORES; i++) begin
        wp[i]     <= '0;
        cfg_we[i] <= 1'b0;
        start[i]  <= 1'b0;
        cfg_waddr[i] <= '0;
      end
      cfg_wdata <= '0;
    end else begin
      cfg_wdata <= pkt.data;
      for (int i = 0; i < N_CORES; i++) begin
        logic tgt;
        tgt = pkt_valid && (pkt.bcast || pkt.core == ID_W'(i));
        cfg_we[i] <= tgt && (pkt.kind == PK_CFG);
        start[i]  <= tgt && (pkt.kind == PK_START);
        cfg_waddr[i] <= wp[i];
        if (tgt && pkt.kind == PK_CFG)   wp[i] <= wp[i] + 1'b1;
        if (tgt && pkt.kind == PK_START) wp[i] <= '0;
      end
    end
  end

endmodule
