// tb_core: self-checking test of one core running its microprogram.
//  1. MATMUL x=3,y=4,k=5 then STORE: the 12 words of C = sum_q a_q b_q^T are
//     compared with a product worked out in the testbench (small integer
//     values, so every sum is exact). The run must take no more than
//     k*x*y + x + 16 cycles: one multiply-add per clock.
//  2. MATMUL x=1,y=2,k=4: each accumulator is revisited within the pipeline
//     depth, so the read-after-write stall must occur and results stay right.
//  3. SPMV over 6 rows and 5 columns (one column empty), with a row repeated
//     from the end of one column to the start of the next, then STORE.
//  4. A start given while the program runs restarts it at its end.
// The output buffer is read with random back-pressure.
module tb_core;
  import mc_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic a_in_valid, a_in_ready, b_in_valid, b_in_ready, o_out_valid, o_out_ready;
  word_t a_in_data, b_in_data, o_out_data, cfg_wdata;
  logic cfg_we, start, busy, done, ev_fma, ev_raw_stall, ev_overlap;
  logic [4:0] cfg_waddr;

  core #(.LMEM_WORDS(256), .BBUF_X(8), .CFG_WORDS(32), .FIFO_DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  word_t aq[$], bq[$], oq[$];
  int n_fma = 0, n_stall = 0, n_overlap = 0;

  always_ff @(posedge clk) begin
    if (a_in_valid && a_in_ready) void'(aq.pop_front());
    if (b_in_valid && b_in_ready) void'(bq.pop_front());
    if (o_out_valid && o_out_ready) oq.push_back(o_out_data);
    if (ev_fma) n_fma++;
    if (ev_raw_stall) n_stall++;
    if (ev_overlap) n_overlap++;
  end
  always_comb begin
    a_in_valid = aq.size() > 0;
    a_in_data  = a_in_valid ? aq[0] : '0;
    b_in_valid = bq.size() > 0;
    b_in_data  = b_in_valid ? bq[0] : '0;
  end
  always_ff @(posedge clk) o_out_ready <= ($urandom_range(3, 0) != 0);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic load(input core_instr_t prog[]);
    foreach (prog[i]) begin
      logic [63:0] w;
      w = prog[i];
      @(negedge clk); cfg_we = 1; cfg_waddr = 5'(2*i);   cfg_wdata = w[31:0];
      @(negedge clk); cfg_we = 1; cfg_waddr = 5'(2*i+1); cfg_wdata = w[63:32];
    end
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic run(output int cycles);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  function automatic word_t fi(input int v);  // small integer as float
    return r2f(real'(v));
  endfunction

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    cfg_we = 0; start = 0; cfg_waddr = '0; cfg_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- 1: block product ----
    begin
      localparam int X = 3, Y = 4, K = 5;
      int A[K][Y], B[K][X], C[Y][X];
      core_instr_t prog[3];
      prog[0] = '{op: OP_MATMUL, f1: X, f2: Y, f3: K};
      prog[1] = '{op: OP_STORE,  f1: 0, f2: X*Y, f3: 0};
      prog[2] = '{op: OP_HALT,   f1: 0, f2: 0, f3: 0};
      load(prog);
      foreach (C[r, j]) C[r][j] = 0;
      for (int q = 0; q < K; q++) begin
        for (int j = 0; j < X; j++) begin B[q][j] = $urandom_range(15, 0) - 7; bq.push_back(fi(B[q][j])); end
        for (int r = 0; r < Y; r++) begin A[q][r] = $urandom_range(15, 0) - 7; aq.push_back(fi(A[q][r])); end
        for (int r = 0; r < Y; r++) for (int j = 0; j < X; j++) C[r][j] += A[q][r] * B[q][j];
      end
      n_fma = 0;
      run(cyc);
      repeat (20) @(negedge clk);
      check(oq.size() == X*Y, $sformatf("matmul output count %0d", oq.size()));
      for (int r = 0; r < Y; r++) for (int j = 0; j < X; j++)
        if (oq.size() > 0) begin
          word_t got;
          got = oq.pop_front();
          check(f2r(got) == real'(C[r][j]), $sformatf("C[%0d][%0d] = %f expected %0d", r, j, f2r(got), C[r][j]));
        end
      check(n_fma == X*Y*K, $sformatf("fma count %0d", n_fma));
      // includes the store phase (X*Y words) under random back-pressure
      check(cyc <= K*X*Y + X + 16 + 4*X*Y, $sformatf("matmul took %0d cycles", cyc));
      check(n_overlap > 0, "B row loading never overlapped the products");
      $display("matmul %0dx%0dx%0d: %0d cycles, %0d overlapped loads", X, Y, K, cyc, n_overlap);
    end

    // ---- 1b: throughput without the store ----
    begin
      localparam int X = 4, Y = 6, K = 8;
      core_instr_t prog[2];
      prog[0] = '{op: OP_MATMUL, f1: X, f2: Y, f3: K};
      prog[1] = '{op: OP_HALT,   f1: 0, f2: 0, f3: 0};
      load(prog);
      for (int q = 0; q < K; q++) begin
        for (int j = 0; j < X; j++) bq.push_back(fi(1));
        for (int r = 0; r < Y; r++) aq.push_back(fi(1));
      end
      run(cyc);
      check(cyc <= K*X*Y + X + 12, $sformatf("peak-rate matmul took %0d cycles for %0d products", cyc, K*X*Y));
    end

    // ---- 2: read-after-write stall ----
    begin
      localparam int X = 1, Y = 2, K = 4;
      int C[Y];
      core_instr_t prog[3];
      prog[0] = '{op: OP_MATMUL, f1: X, f2: Y, f3: K};
      prog[1] = '{op: OP_STORE,  f1: 0, f2: X*Y, f3: 0};
      prog[2] = '{op: OP_HALT,   f1: 0, f2: 0, f3: 0};
      load(prog);
      C = '{0, 0};
      for (int q = 0; q < K; q++) begin
        int b;
        b = q + 1;
        bq.push_back(fi(b));
        for (int r = 0; r < Y; r++) begin aq.push_back(fi(r + 2)); C[r] += (r + 2) * b; end
      end
      n_stall = 0;
      run(cyc);
      repeat (10) @(negedge clk);
      check(n_stall > 0, "no read-after-write stall seen");
      check(oq.size() == Y, "stall test output count");
      for (int r = 0; r < Y; r++) if (oq.size() > 0) begin
        word_t got;
        got = oq.pop_front();
        check(f2r(got) == real'(C[r]), $sformatf("stall C[%0d] = %f expected %0d", r, f2r(got), C[r]));
      end
    end

    // ---- 3: sparse columns ----
    begin
      localparam int R = 6, NC = 5;
      int y[R];
      core_instr_t prog[3];
      prog[0] = '{op: OP_SPMV,  f1: R, f2: NC, f3: 0};
      prog[1] = '{op: OP_STORE, f1: 0, f2: R, f3: 0};
      prog[2] = '{op: OP_HALT,  f1: 0, f2: 0, f3: 0};
      load(prog);
      foreach (y[i]) y[i] = 0;
      for (int c = 0; c < NC; c++) begin
        int xv, n;
        int rows[$];
        xv = $urandom_range(9, 1);
        n  = (c == 2) ? 0 : $urandom_range(4, 1);
        rows.delete();
        // the first row of each column repeats the last row of the previous one
        for (int i = 0; i < n; i++) rows.push_back((i == 0) ? (c % R) : $urandom_range(R-1, 0));
        aq.push_back(fi(xv));
        aq.push_back(word_t'(n));
        foreach (rows[i]) begin
          int v;
          v = $urandom_range(9, 0) - 4;
          aq.push_back(word_t'(rows[i]));
          aq.push_back(fi(v));
          y[rows[i]] += v * xv;
        end
      end
      n_stall = 0;
      run(cyc);
      repeat (10) @(negedge clk);
      check(oq.size() == R, "spmv output count");
      for (int r = 0; r < R; r++) if (oq.size() > 0) begin
        word_t got;
        got = oq.pop_front();
        check(f2r(got) == real'(y[r]), $sformatf("y[%0d] = %f expected %0d", r, f2r(got), y[r]));
      end
      $display("spmv: %0d cycles, %0d stalls", cyc, n_stall);
    end

    // ---- 4: start while busy ----
    begin
      int ndone, C[2][4];
      core_instr_t prog[3];
      prog[0] = '{op: OP_MATMUL, f1: 2, f2: 2, f3: 1};
      prog[1] = '{op: OP_STORE,  f1: 0, f2: 4, f3: 0};
      prog[2] = '{op: OP_HALT,   f1: 0, f2: 0, f3: 0};
      load(prog);
      for (int t = 0; t < 2; t++) begin
        int bv[2], av[2];
        for (int j = 0; j < 2; j++) begin bv[j] = t*4 + j + 1; bq.push_back(fi(bv[j])); end
        for (int r = 0; r < 2; r++) begin av[r] = t*3 + r + 2; aq.push_back(fi(av[r])); end
        for (int r = 0; r < 2; r++) for (int j = 0; j < 2; j++) C[t][r*2+j] = av[r] * bv[j];
      end
      ndone = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      @(negedge clk); start = 1;   // program is running now
      @(negedge clk); start = 0;
      for (int i = 0; i < 400 && ndone < 2; i++) begin
        @(negedge clk);
        if (done) ndone++;
      end
      repeat (20) @(negedge clk);
      check(ndone == 2, $sformatf("queued start: %0d runs", ndone));
      check(oq.size() == 8, $sformatf("queued start output count %0d", oq.size()));
      for (int t = 0; t < 2; t++) for (int i = 0; i < 4; i++) if (oq.size() > 0) begin
        word_t got;
        got = oq.pop_front();
        check(f2r(got) == real'(C[t][i]), $sformatf("run %0d word %0d = %f expected %0d", t, i, f2r(got), C[t][i]));
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
