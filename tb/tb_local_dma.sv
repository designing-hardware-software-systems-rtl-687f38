// tb_local_dma: self-checking test of the local DMA's routing, checked
// against rules written out in the testbench for random packets and random
// buffer readiness: a data packet goes to the aF or bF buffer of its core
// only; a broadcast goes to every core and only when all can take it;
// configuration and start go to the local PE; packets for another cluster
// are accepted and dropped; the up stream is the selected core's.
module tb_local_dma;
  import mc_pkg::*;

  localparam int N = 3, ID = 1;

  logic      dn_valid, accept, pe_valid, pe_ready, up_valid, up_ready;
  down_pkt_t dn_pkt, pe_pkt;
  logic      a_valid [N], a_ready [N], b_valid [N], b_ready [N];
  logic      o_valid [N], o_ready [N];
  word_t     o_data [N], core_data, up_data;
  logic [7:0] up_sel_core;

  local_dma #(.N_CORES(N), .CLUSTER_ID(ID)) dut (.*);

  int checks = 0, failures = 0, n_bc = 0, n_blocked = 0, n_cfg = 0, n_other = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic mine, cfg, allr, exp_acc;
      dn_valid = $urandom_range(3, 0) != 0;
      dn_pkt.kind    = pkt_kind_e'($urandom_range(3, 0));
      dn_pkt.bcast   = $urandom_range(3, 0) == 0;
      dn_pkt.cluster = 8'($urandom_range(2, 0));
      dn_pkt.core    = 8'($urandom_range(N - 1, 0));
      dn_pkt.data    = $urandom;
      pe_ready = $urandom_range(3, 0) != 0;
      for (int i = 0; i < N; i++) begin
        a_ready[i] = $urandom_range(3, 0) != 0;
        b_ready[i] = $urandom_range(3, 0) != 0;
        o_valid[i] = $urandom_range(1, 0);
        o_data[i]  = $urandom;
      end
      up_sel_core = 8'($urandom_range(N, 0));
      up_ready    = $urandom_range(1, 0);
      #1;
      mine = dn_pkt.bcast || dn_pkt.cluster == 8'(ID);
      cfg  = dn_pkt.kind == PK_CFG || dn_pkt.kind == PK_START;
      allr = 1;
      for (int i = 0; i < N; i++)
        if (dn_pkt.bcast || dn_pkt.core == 8'(i))
          if (!((dn_pkt.kind == PK_A) ? a_ready[i] : b_ready[i])) allr = 0;
      exp_acc = !mine || (cfg ? pe_ready : allr);
      check(accept == exp_acc, "accept");
      check(pe_valid == (dn_valid && mine && cfg), "to local PE");
      if (pe_valid) begin check(pe_pkt == dn_pkt, "PE packet"); n_cfg++; end
      if (!mine) n_other++;
      if (mine && !cfg && dn_pkt.bcast && !allr) n_blocked++;
      if (mine && !cfg && dn_pkt.bcast && allr && dn_valid) n_bc++;
      for (int i = 0; i < N; i++) begin
        logic t_i;
        t_i = dn_valid && mine && !cfg && allr && (dn_pkt.bcast || dn_pkt.core == 8'(i));
        check(a_valid[i] == (t_i && dn_pkt.kind == PK_A), $sformatf("a_valid[%0d]", i));
        check(b_valid[i] == (t_i && dn_pkt.kind == PK_B), $sformatf("b_valid[%0d]", i));
        check(o_ready[i] == (up_ready && up_sel_core == 8'(i)), "o_ready");
      end
      check(core_data == dn_pkt.data, "data to cores");
      if (up_sel_core < N) check(up_valid == o_valid[up_sel_core] && up_data == o_data[up_sel_core], "up mux");
      else check(!up_valid, "no core selected");
      #1;
    end
    check(n_bc > 0 && n_blocked > 0 && n_cfg > 0 && n_other > 0, "all cases seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
