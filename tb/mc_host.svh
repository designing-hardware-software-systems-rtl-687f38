// mc_host.svh: host-side program of the end-to-end testbenches, included in
// the body of a testbench module. It plays the embedded processor: it lays
// out matrices in the external memory model, writes the cores' microprogram
// into memory, queues DMA read and write instructions, waits for the results
// and compares them with products it works out itself. Small integer values
// make every floating-point sum exact, so results must match exactly.
// Expects in scope: localparams NCL (clusters) and CPC (cores per cluster),
// the clock clk, the coprocessor's host ports, its perf counters and the
// memory model instance u_mem.

localparam int P = NCL * CPC;

int checks = 0, failures = 0;
int n_bcast = 0, n_cfg_bcast = 0, n_rw_overlap = 0;

task automatic check(input bit ok, input string msg);
  checks++;
  if (!ok) begin
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  end
endtask

// Mechanism counters the perf block does not hold.
always @(posedge clk) begin
  if (rd_instr_valid && rd_instr_ready && rd_instr.bcast) begin
    if (rd_instr.kind == PK_A) n_bcast++;
    if (rd_instr.kind == PK_CFG) n_cfg_bcast++;
  end
  if (mem_wr_valid && (mem_rd_rvalid || mem_rd_req_valid)) n_rw_overlap++;
end

task automatic push_rd(input pkt_kind_e kind, input logic bcast, input int dst,
                       input int addr, input int count, input int stride);
  @(negedge clk);
  rd_instr.kind    = kind;
  rd_instr.bcast   = bcast;
  rd_instr.cluster = ID_W'(dst / CPC);
  rd_instr.core    = ID_W'(dst % CPC);
  rd_instr.addr    = ADDR_W'(addr);
  rd_instr.count   = CNT_W'(count);
  rd_instr.stride  = CNT_W'(stride);
  rd_instr_valid   = 1'b1;
  while (!rd_instr_ready) @(negedge clk);   // ready does not depend on valid
  @(posedge clk);
  rd_instr_valid <= 1'b0;
endtask

task automatic push_wr(input int src, input int addr, input int count, input int stride);
  @(negedge clk);
  wr_instr.cluster = ID_W'(src / CPC);
  wr_instr.core    = ID_W'(src % CPC);
  wr_instr.addr    = ADDR_W'(addr);
  wr_instr.count   = CNT_W'(count);
  wr_instr.stride  = CNT_W'(stride);
  wr_instr_valid   = 1'b1;
  while (!wr_instr_ready) @(negedge clk);
  @(posedge clk);
  wr_instr_valid <= 1'b0;
endtask

function automatic logic [31:0] fint(input int v);
  return tb_fp_pkg::r2f(real'(v));
endfunction

task automatic put_prog(input int addr, input core_instr_t prog[]);
  foreach (prog[i]) begin
    logic [63:0] w;
    w = prog[i];
    u_mem.mem[addr + 2*i]     = w[31:0];
    u_mem.mem[addr + 2*i + 1] = w[63:32];
  end
endtask

task automatic wait_writes(input int target, input int limit, output int cycles);
  cycles = 0;
  while (int'(wr_done_cnt) < target && cycles < limit) begin
    @(posedge clk);
    cycles++;
  end
endtask

task automatic matmul_reads(input int n, input int x, input int y, input int A_, input int B_, input int PR);
  push_rd(PK_CFG, 1'b1, 0, PR, 6, 1);              // same program to every core
  for (int jb = 0; jb < n / (x*P); jb++)
    for (int ib = 0; ib < n / y; ib++) begin
      push_rd(PK_START, 1'b1, 0, 0, 1, 1);
      for (int q = 0; q < n; q++) begin
        for (int p = 0; p < P; p++) begin
          push_rd(PK_B, 1'b0, p, B_ + q*n + jb*x*P + p*x, x, 1);
        end
        push_rd(PK_A, 1'b1, 0, A_ + ib*y*n + q, y, n); // column of A: strided
      end
    end
endtask

task automatic matmul_writes(input int n, input int x, input int y, input int C_);
  for (int jb = 0; jb < n / (x*P); jb++)
    for (int ib = 0; ib < n / y; ib++)
      for (int p = 0; p < P; p++)
        for (int r = 0; r < y; r++)
          push_wr(p, C_ + (ib*y + r)*n + jb*x*P + p*x, x, 1);
endtask

// C = A x B, n x n, with blocks of x columns per core and y rows: the
// block algorithm with inner dimension 1 and the A column broadcast.
task automatic run_matmul(input int n, input int x, input int y, input int base);
  int A_, B_, C_, PR;
  int A[][], B[][];
  longint C;
  int wr0, cyc, nwr, fma0;
  core_instr_t prog[3];
  A_ = base; B_ = base + n*n; C_ = base + 2*n*n; PR = base + 3*n*n;
  if (n % (x*P) != 0 || n % y != 0) $fatal(1, "matmul sizes do not tile");
  A = new[n]; B = new[n];
  foreach (A[i]) begin A[i] = new[n]; B[i] = new[n]; end
  for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) begin
    A[i][j] = $urandom_range(6, 0) - 3;
    B[i][j] = $urandom_range(6, 0) - 3;
    u_mem.mem[A_ + i*n + j] = fint(A[i][j]);
    u_mem.mem[B_ + i*n + j] = fint(B[i][j]);
    u_mem.mem[C_ + i*n + j] = 32'hdead_beef;
  end
  prog[0] = '{op: OP_MATMUL, f1: FLD_W'(x), f2: FLD_W'(y), f3: FLD_W'(n)};
  prog[1] = '{op: OP_STORE,  f1: '0, f2: FLD_W'(x*y), f3: '0};
  prog[2] = '{op: OP_HALT,   f1: '0, f2: '0, f3: '0};
  put_prog(PR, prog);
  wr0  = int'(wr_done_cnt);
  fma0 = int'(perf.fma_ops);
  nwr  = (n / (x*P)) * (n / y) * P * y;
  cache_flush <= 1'b1;
  @(posedge clk);
  cache_flush <= 1'b0;
  fork
    matmul_reads(n, x, y, A_, B_, PR);
    matmul_writes(n, x, y, C_);
  join
  wait_writes(wr0 + nwr, 50_000_000, cyc);
  check(int'(wr_done_cnt) == wr0 + nwr, "matmul writes did not all finish");
  for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) begin
    C = 0;
    for (int k = 0; k < n; k++) C += A[i][k] * B[k][j];
    check(tb_fp_pkg::f2r(u_mem.mem[C_ + i*n + j]) == real'(C),
          $sformatf("C[%0d][%0d] = %h expected %0d", i, j, u_mem.mem[C_ + i*n + j], C));
  end
  check(int'(perf.fma_ops) - fma0 == n*n*n, "multiply-add count");
  $display("matmul n=%0d on %0d cores: %0d multiply-adds, %0d cycles after the last instruction was queued",
           n, P, int'(perf.fma_ops) - fma0, cyc);
endtask

task automatic spmv_reads(input int PR, input int saddr[], input int slen[]);
  for (int p = 0; p < P; p++) begin
    push_rd(PK_CFG, 1'b0, p, PR + 6*p, 6, 1);
    push_rd(PK_START, 1'b0, p, 0, 1, 1);
  end
  for (int p = 0; p < P; p++) push_rd(PK_A, 1'b0, p, saddr[p], slen[p], 1);
endtask

task automatic spmv_writes(input int Y_, input int rows_p[]);
  for (int p = 0; p < P; p++) if (rows_p[p] > 0) push_wr(p, Y_ + p, rows_p[p], P);
endtask

// y = A x, A M x N sparse with about dens percent nonzeros; rows go to the
// cores round robin; each core gets one record stream per column:
// x_j, n_j, then n_j pairs (local row, value).
task automatic run_spmv(input int M, input int N, input int dens, input int base);
  int Y_, PR, S_;
  int xv[];
  int A[][];
  int rows_p[];
  int saddr[], slen[];
  int wr0, cyc, ptr;
  A = new[M];
  foreach (A[i]) begin
    A[i] = new[N];
    foreach (A[i][j]) A[i][j] = ($urandom_range(99, 0) < dens) ? ($urandom_range(8, 0) - 4) : 0;
  end
  xv = new[N];
  foreach (xv[j]) xv[j] = $urandom_range(8, 0) - 4;
  rows_p = new[P]; saddr = new[P]; slen = new[P];
  Y_ = base; PR = base + M; S_ = base + M + 8*P;
  ptr = S_;
  for (int p = 0; p < P; p++) begin
    core_instr_t prog[3];
    rows_p[p] = (M - p + P - 1) / P;
    prog[0] = '{op: OP_SPMV,  f1: FLD_W'(rows_p[p]), f2: FLD_W'(N), f3: '0};
    prog[1] = '{op: OP_STORE, f1: '0, f2: FLD_W'(rows_p[p]), f3: '0};
    prog[2] = '{op: OP_HALT,  f1: '0, f2: '0, f3: '0};
    put_prog(PR + 6*p, prog);
    saddr[p] = ptr;
    for (int j = 0; j < N; j++) begin
      int cnt;
      cnt = 0;
      for (int r = p; r < M; r += P) if (A[r][j] != 0) cnt++;
      u_mem.mem[ptr++] = fint(xv[j]);
      u_mem.mem[ptr++] = cnt;
      for (int r = p; r < M; r += P) if (A[r][j] != 0) begin
        u_mem.mem[ptr++] = r / P;
        u_mem.mem[ptr++] = fint(A[r][j]);
      end
    end
    slen[p] = ptr - saddr[p];
  end
  for (int r = 0; r < M; r++) u_mem.mem[Y_ + r] = 32'hdead_beef;
  wr0 = int'(wr_done_cnt);
  fork
    spmv_reads(PR, saddr, slen);
    spmv_writes(Y_, rows_p);
  join
  wait_writes(wr0 + P, 50_000_000, cyc);
  for (int r = 0; r < M; r++) begin
    int yv;
    yv = 0;
    for (int j = 0; j < N; j++) yv += A[r][j] * xv[j];
    check(tb_fp_pkg::f2r(u_mem.mem[Y_ + r]) == real'(yv),
          $sformatf("y[%0d] = %h expected %0d", r, u_mem.mem[Y_ + r], yv));
  end
  $display("spmv %0dx%0d on %0d cores: %0d cycles after the last instruction was queued", M, N, P, cyc);
endtask

// Each mechanism must have happened at least once.
task automatic check_mechanisms();
  $display("mechanisms: A broadcasts %0d, program broadcasts %0d, cache hits %0d, misses %0d, bursts %0d,",
           n_bcast, n_cfg_bcast, perf.cache_hits, perf.cache_misses, perf.bursts);
  $display("            B double-buffer overlaps %0d, network back-pressure cycles %0d, read/write overlap cycles %0d, RAW stalls %0d",
           perf.overlaps, perf.net_stalls, n_rw_overlap, perf.raw_stalls);
  check(n_bcast > 0, "no A broadcast");
  check(n_cfg_bcast > 0, "no program broadcast");
  check(perf.cache_hits > 0, "no cache hit");
  check(perf.cache_misses > 0, "no cache miss");
  check(perf.bursts > 0, "no sequential burst");
  check(perf.overlaps > 0, "B double buffering never overlapped");
  check(perf.net_stalls > 0, "network never applied back-pressure");
  check(n_rw_overlap > 0, "reads and writes never overlapped");
endtask
