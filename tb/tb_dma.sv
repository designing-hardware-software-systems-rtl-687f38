// tb_dma: self-checking test of the central DMA with a memory model.
// Read instructions with stride 1 (bursts), with a large stride (through the
// cache) and a start packet must produce exactly the expected packets, in
// order, under random network back-pressure. A write instruction running at
// the same time as reads must take words from the selected core's stream and
// store them at the strided addresses. Instruction completion counts are
// checked too.
module tb_dma;
  import mc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          rd_instr_valid = 0, rd_instr_ready, wr_instr_valid = 0, wr_instr_ready;
  dma_rd_instr_t rd_instr = '0;
  dma_wr_instr_t wr_instr = '0;
  logic          cache_flush = 0, rd_idle, wr_idle;
  logic [31:0]   rd_done_cnt, wr_done_cnt;
  logic          mem_rd_req_valid, mem_rd_req_ready, mem_rd_rvalid, mem_wr_valid, mem_wr_ready;
  logic [31:0]   mem_rd_req_addr, mem_rd_rdata, mem_wr_addr, mem_wr_data;
  logic [7:0]    mem_rd_req_len;
  logic          dn_valid, dn_ready, up_valid, up_ready;
  down_pkt_t     dn_pkt;
  logic [7:0]    up_sel_cluster, up_sel_core;
  word_t         up_data;
  logic          ev_hit, ev_miss, ev_burst, ev_dn_stall;

  dma #(.N_LINES(4), .LINE_WORDS(4), .MAX_BURST(8), .BUF_DEPTH(16), .IQ_DEPTH(4)) dut (.*);

  ext_mem_model #(.WORDS(1024), .LATENCY(5)) u_mem (
    .clk, .rst_n, .rd_req_valid(mem_rd_req_valid), .rd_req_ready(mem_rd_req_ready),
    .rd_req_addr(mem_rd_req_addr), .rd_req_len(mem_rd_req_len),
    .rvalid(mem_rd_rvalid), .rdata(mem_rd_rdata),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  int checks = 0, failures = 0, hits = 0, misses = 0, bursts = 0, both = 0;
  down_pkt_t expq[$];
  int up_sent = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  // network sink with random back-pressure; the up stream is a counter
  // pattern offered only by core (2,1)
  always @(negedge clk) dn_ready = $urandom_range(3, 0) != 0;
  always_comb begin
    up_valid = (up_sel_cluster == 8'd2) && (up_sel_core == 8'd1);
    up_data  = 32'hC000_0000 + 32'(up_sent);
  end
  always @(posedge clk) begin
    if (up_valid && up_ready) up_sent <= up_sent + 1;
    if (ev_hit) hits++;
    if (ev_miss) misses++;
    if (ev_burst) bursts++;
    if (mem_wr_valid && (mem_rd_rvalid || mem_rd_req_valid)) both++;
    if (dn_valid && dn_ready) begin
      if (expq.size() == 0) check(0, "unexpected packet");
      else begin
        down_pkt_t e;
        e = expq.pop_front();
        check(dn_pkt == e, $sformatf("packet %h expected %h", dn_pkt, e));
      end
    end
  end

  task automatic push_rd(input pkt_kind_e k, input logic bc, input int cl, input int co,
                         input int addr, input int cnt, input int stride);
    @(negedge clk);
    rd_instr = '{kind: k, bcast: bc, cluster: ID_W'(cl), core: ID_W'(co),
                 addr: ADDR_W'(addr), count: CNT_W'(cnt), stride: CNT_W'(stride)};
    rd_instr_valid = 1;
    while (!rd_instr_ready) @(negedge clk);
    @(posedge clk);
    rd_instr_valid <= 0;
    for (int i = 0; i < ((k == PK_START) ? 1 : cnt); i++)
      expq.push_back('{kind: k, bcast: bc, cluster: ID_W'(cl), core: ID_W'(co),
                       data: (k == PK_START) ? '0 : u_mem.mem[addr + i * stride]});
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = 32'hA000_0000 + 3 * i;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // write instruction first: it runs alongside the reads
    @(negedge clk);
    wr_instr = '{cluster: 8'd2, core: 8'd1, addr: 32'd600, count: CNT_W'(10), stride: CNT_W'(3)};
    wr_instr_valid = 1;
    while (!wr_instr_ready) @(negedge clk);
    @(posedge clk);
    wr_instr_valid <= 0;
    push_rd(PK_B, 1'b0, 1, 2, 10, 37, 1);      // sequential: bursts
    push_rd(PK_A, 1'b1, 0, 0, 3, 4, 9);        // strided: cache
    push_rd(PK_A, 1'b1, 0, 0, 4, 4, 9);        // neighbouring column: hits
    push_rd(PK_START, 1'b1, 0, 0, 0, 1, 1);
    push_rd(PK_CFG, 1'b0, 3, 1, 100, 5, 1);
    cyc = 0;
    while ((rd_done_cnt < 5 || wr_done_cnt < 1) && cyc < 5000) begin @(posedge clk); cyc++; end
    repeat (5) @(posedge clk);
    check(rd_done_cnt == 5, $sformatf("read instructions done %0d", rd_done_cnt));
    check(wr_done_cnt == 1, $sformatf("write instructions done %0d", wr_done_cnt));
    check(expq.size() == 0, $sformatf("%0d packets missing", expq.size()));
    for (int i = 0; i < 10; i++)
      check(u_mem.mem[600 + 3 * i] == 32'hC000_0000 + 32'(i), $sformatf("written word %0d = %h", i, u_mem.mem[600 + 3 * i]));
    check(u_mem.mem[601] == 32'hA000_0000 + 3 * 601, "word between strided writes untouched");
    check(bursts >= 5, $sformatf("bursts %0d", bursts));
    check(misses > 0 && hits > 0, $sformatf("cache hits %0d misses %0d", hits, misses));
    check(rd_idle && wr_idle, "idle at end");
    $display("hits %0d misses %0d bursts %0d, reads and writes together %0d cycles", hits, misses, bursts, both);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
