// tb_icn_bus: self-checking test of the interconnection network (bus).
// Random packets pass through with random per-cluster accept: a packet must
// appear to the clusters only while every cluster accepts, each packet
// exactly once and in order, and the DMA may not send faster than the
// clusters take. The up direction must pass only the selected cluster's
// stream, with ready only to that cluster.
module tb_icn_bus;
  import mc_pkg::*;

  localparam int NC = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      dn_valid = 0, dn_ready, cl_dn_valid, up_valid, up_ready;
  down_pkt_t dn_pkt = '0, cl_dn_pkt;
  logic      cl_accept [NC];
  logic [7:0] up_sel_cluster, up_sel_core, cl_up_sel_core;
  logic      cl_up_valid [NC], cl_up_ready [NC];
  word_t     cl_up_data [NC], up_data;

  icn_bus #(.N_CLUSTERS(NC)) dut (.*);

  int checks = 0, failures = 0, sent = 0, got = 0, held = 0;
  down_pkt_t q[$];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    for (int i = 0; i < NC; i++) begin
      cl_accept[i]   = $urandom_range(3, 0) != 0;
      cl_up_valid[i] = $urandom_range(1, 0);
      cl_up_data[i]  = $urandom;
    end
    up_sel_cluster = 8'($urandom_range(NC - 1, 0));
    up_sel_core    = 8'($urandom);
    up_ready       = $urandom_range(1, 0);
    #1;
    // up direction, combinational
    check(up_valid == cl_up_valid[up_sel_cluster] && up_data == cl_up_data[up_sel_cluster], "up mux");
    check(cl_up_sel_core == up_sel_core, "core selection passed on");
    for (int i = 0; i < NC; i++)
      check(cl_up_ready[i] == (up_ready && i == int'(up_sel_cluster)), "up ready");
    // down direction
    begin
      logic all;
      all = cl_accept[0] && cl_accept[1] && cl_accept[2];
      if (cl_dn_valid) check(all, "packet shown while a cluster refuses");
      if (!all && q.size() > 0) held++;
    end
  end

  always @(posedge clk) begin
    if (dn_valid && dn_ready) q.push_back(dn_pkt);
    if (cl_dn_valid) begin
      got++;
      if (q.size() == 0) check(0, "packet from nowhere");
      else check(cl_dn_pkt == q.pop_front(), "packet order");
    end
  end

  initial begin
    for (int i = 0; i < NC; i++) cl_accept[i] = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (sent < 500) begin
      @(negedge clk);
      #2;
      if (!dn_valid || dn_ready) begin
        dn_valid <= $urandom_range(1, 0);
        dn_pkt   <= down_pkt_t'({$urandom, $urandom});
      end
      @(posedge clk);
      if (dn_valid && dn_ready) sent++;
    end
    @(negedge clk) dn_valid <= 0;
    repeat (20) @(posedge clk);
    check(got == 500 && q.size() == 0, $sformatf("sent 500, delivered %0d", got));
    check(held > 0, "clusters never refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
