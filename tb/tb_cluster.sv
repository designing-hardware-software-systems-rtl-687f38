// tb_cluster: self-checking test of one cluster of two cores. The program
// (block product then store) is written into both cores by broadcast
// configuration packets and started by a broadcast start packet. Each core
// gets its own B rows by addressed packets while the A column elements are
// broadcast to both; packets for another cluster are mixed in and must be
// dropped. The results are collected core by core through the up port and
// compared with a product computed in the testbench.
module tb_cluster;
  import mc_pkg::*;
  import tb_fp_pkg::*;

  localparam int N = 2, ID = 1, X = 3, Y = 4, K = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      dn_valid = 0, accept, up_valid, up_ready = 0;
  down_pkt_t dn_pkt = '0;
  logic [ID_W-1:0] up_sel_core = '0;
  word_t     up_data;
  logic      core_busy [N], core_done [N], ev_fma [N], ev_raw_stall [N], ev_overlap [N];

  cluster #(.CLUSTER_ID(ID), .N_CORES(N), .LMEM_WORDS(64), .BBUF_X(4),
            .CFG_WORDS(32), .FIFO_DEPTH(4)) dut (.*);

  int checks = 0, failures = 0, n_fma = 0, n_done = 0, n_blocked = 0;
  down_pkt_t q [$];

  always @(posedge clk) for (int i = 0; i < N; i++) begin
    if (ev_fma[i]) n_fma++;
    if (core_done[i]) n_done++;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  function automatic down_pkt_t mk(input pkt_kind_e k, input logic bc, input int cl,
                                   input int core, input word_t d);
    return '{kind: k, bcast: bc, cluster: 8'(cl), core: 8'(core), data: d};
  endfunction

  // sends the queued packets in order, one per clock when accepted
  task automatic drain_q();
    while (q.size() > 0) begin
      @(negedge clk);
      dn_valid = 1;
      dn_pkt   = q[0];
      #1;
      if (accept) void'(q.pop_front());
      else n_blocked++;
    end
    @(negedge clk);
    dn_valid = 0;
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int A [K][Y], B [N][K][X], C [N][Y][X];
    core_instr_t prog [3];
    repeat (3) @(negedge clk);
    rst_n = 1;
    prog[0] = '{op: OP_MATMUL, f1: X, f2: Y, f3: K};
    prog[1] = '{op: OP_STORE,  f1: 0, f2: X*Y, f3: 0};
    prog[2] = '{op: OP_HALT,   f1: 0, f2: 0, f3: 0};
    foreach (prog[i]) begin
      logic [63:0] w;
      w = prog[i];
      q.push_back(mk(PK_CFG, 1'b1, 0, 0, w[31:0]));
      q.push_back(mk(PK_CFG, 1'b0, 2, 0, 32'hdead_beef));   // other cluster
      q.push_back(mk(PK_CFG, 1'b1, 0, 0, w[63:32]));
    end
    q.push_back(mk(PK_START, 1'b1, 0, 0, 0));
    foreach (C[i, r, j]) C[i][r][j] = 0;
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < N; i++) for (int j = 0; j < X; j++) begin
        B[i][k][j] = $urandom_range(9, 0) - 4;
        q.push_back(mk(PK_B, 1'b0, ID, i, r2f(real'(B[i][k][j]))));
      end
      q.push_back(mk(PK_A, 1'b0, 0, 0, 32'h4000_0000));     // other cluster
      for (int r = 0; r < Y; r++) begin
        A[k][r] = $urandom_range(9, 0) - 4;
        q.push_back(mk(PK_A, 1'b1, 0, 0, r2f(real'(A[k][r]))));
      end
      for (int i = 0; i < N; i++) for (int r = 0; r < Y; r++) for (int j = 0; j < X; j++)
        C[i][r][j] += A[k][r] * B[i][k][j];
    end
    fork
      drain_q();
      // collect each core's results in turn
      for (int i = 0; i < N; i++) begin
        int got = 0;
        up_sel_core = ID_W'(i);
        up_ready = 1;
        while (got < X*Y) begin
          @(negedge clk);
          #1;
          if (up_valid) begin
            check(f2r(up_data) == real'(C[i][got / X][got % X]),
                  $sformatf("core %0d C[%0d][%0d] = %f expected %0d", i, got / X, got % X,
                            f2r(up_data), C[i][got / X][got % X]));
            got++;
          end
        end
      end
    join
    for (int c = 0; c < 100 && n_done < N; c++) @(negedge clk);
    repeat (2) @(negedge clk);
    up_ready = 0;
    check(n_fma == N*X*Y*K, $sformatf("fma count %0d", n_fma));
    check(n_done == N, $sformatf("done pulses %0d", n_done));
    for (int i = 0; i < N; i++) check(!core_busy[i], "core idle at the end");
    check(n_blocked > 0, "broadcast never had to wait");
    $display("cluster: %0d products, %0d blocked packet cycles", n_fma, n_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
