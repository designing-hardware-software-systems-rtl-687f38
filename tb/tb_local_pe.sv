// tb_local_pe: self-checking test of the local PE. Programs of different
// lengths are written into single cores and by broadcast into all; each
// configuration word must reach the addressed core's configuration memory
// at consecutive addresses from 0, one clock after the packet; a start
// packet must pulse start for the addressed cores and restart their
// addresses at 0.
module tb_local_pe;
  import mc_pkg::*;

  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      pkt_valid = 0, pkt_ready;
  down_pkt_t pkt = '0;
  logic      cfg_we [N], start [N];
  logic [4:0] cfg_waddr [N];
  word_t     cfg_wdata;

  local_pe #(.N_CORES(N), .CFG_WORDS(32)) dut (.*);

  int checks = 0, failures = 0;
  word_t cmem [N][32];
  int starts [N];
  int wp_model [N];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  always @(posedge clk) for (int i = 0; i < N; i++) begin
    if (cfg_we[i]) cmem[i][cfg_waddr[i]] = cfg_wdata;
    if (start[i]) starts[i]++;
  end

  task automatic send(input pkt_kind_e k, input logic bc, input int core, input word_t d);
    @(negedge clk);
    pkt_valid = 1;
    pkt = '{kind: k, bcast: bc, cluster: 8'd0, core: 8'(core), data: d};
    check(pkt_ready, "always ready");
    @(negedge clk);
    pkt_valid = 0;
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (starts[i]) starts[i] = 0;
    foreach (cmem[i, j]) cmem[i][j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // broadcast program of 6 words
    for (int w = 0; w < 6; w++) send(PK_CFG, 1'b1, 0, 32'h100 + w);
    repeat (2) @(posedge clk);
    for (int i = 0; i < N; i++) for (int w = 0; w < 6; w++)
      check(cmem[i][w] == 32'h100 + w, $sformatf("broadcast word %0d core %0d", w, i));
    // start core 1 only
    send(PK_START, 1'b0, 1, 0);
    repeat (2) @(posedge clk);
    check(starts[0] == 0 && starts[1] == 1 && starts[2] == 0, "start core 1");
    // core 1 gets a new 4-word program from address 0; core 2 continues at 6
    for (int w = 0; w < 4; w++) send(PK_CFG, 1'b0, 1, 32'h200 + w);
    for (int w = 0; w < 2; w++) send(PK_CFG, 1'b0, 2, 32'h300 + w);
    repeat (2) @(posedge clk);
    for (int w = 0; w < 4; w++) check(cmem[1][w] == 32'h200 + w, $sformatf("core 1 word %0d", w));
    check(cmem[1][4] == 32'h104, "core 1 word 4 untouched");
    check(cmem[2][6] == 32'h300 && cmem[2][7] == 32'h301, "core 2 appended");
    check(cmem[0][3] == 32'h103, "core 0 untouched");
    send(PK_START, 1'b1, 0, 0);
    repeat (2) @(posedge clk);
    check(starts[0] == 1 && starts[1] == 2 && starts[2] == 1, "broadcast start");
    send(PK_CFG, 1'b1, 0, 32'h400);
    repeat (2) @(posedge clk);
    for (int i = 0; i < N; i++) check(cmem[i][0] == 32'h400, "address restarts at 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
