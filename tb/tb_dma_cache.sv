// tb_dma_cache: self-checking test of the DMA cache against a memory model.
// Strided request sequences (a matrix column read repeatedly, as the block
// product does) must return memory contents in order; the first request to
// a new address must be a miss answered as soon as the first burst word
// arrives (LAT + 4 clocks with this memory model: request, memory
// acceptance, LAT, the word, the output register); requests inside a fetched line must hit and be answered one clock
// after acceptance; flush must turn hits back into misses; lines are
// replaced round robin after N_LINES misses.
module tb_dma_cache;
  import mc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NL = 4, LWD = 4, LAT = 6;

  logic        flush = 0, req_valid = 0, req_ready, resp_valid, resp_ready;
  logic [31:0] req_addr = 0;
  word_t       resp_data, mem_rdata;
  logic        mem_req_valid, mem_req_ready, mem_rvalid, busy, ev_hit, ev_miss;
  logic [31:0] mem_req_addr;
  logic [7:0]  mem_req_len;
  logic        wr_ready_unused;

  dma_cache #(.N_LINES(NL), .LINE_WORDS(LWD)) dut (.*);

  ext_mem_model #(.WORDS(1024), .LATENCY(LAT)) u_mem (
    .clk, .rst_n, .rd_req_valid(mem_req_valid), .rd_req_ready(mem_req_ready),
    .rd_req_addr(mem_req_addr), .rd_req_len(mem_req_len),
    .rvalid(mem_rvalid), .rdata(mem_rdata),
    .wr_valid(1'b0), .wr_ready(wr_ready_unused), .wr_addr(32'd0), .wr_data(32'd0));

  int checks = 0, failures = 0, hits = 0, misses = 0;
  always @(posedge clk) begin
    if (ev_hit) hits++;
    if (ev_miss) misses++;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  // One request; returns the data and the clocks from acceptance to response.
  task automatic read(input int a, output word_t d, output int lat);
    @(negedge clk);
    req_valid = 1; req_addr = a; resp_ready = 1;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 0;
    lat = 1;
    while (!resp_valid) begin @(posedge clk); #1; lat++; end
    d = resp_data;
    @(posedge clk);
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t d;
    int lat, h0, m0;
    resp_ready = 1;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = 32'h1000_0000 + i * 7;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // column of a 32-wide matrix, rows 0..3, columns 0..5
    for (int q = 0; q < 6; q++)
      for (int r = 0; r < 4; r++) begin
        h0 = hits; m0 = misses;
        read(r * 32 + q + 5, d, lat);
        check(d == u_mem.mem[r * 32 + q + 5], $sformatf("data at %0d", r * 32 + q + 5));
        if (q % LWD == 0) check(misses == m0 + 1 && lat == LAT + 4, $sformatf("miss at q=%0d r=%0d latency %0d", q, r, lat));
        else              check(hits == h0 + 1 && lat == 1, $sformatf("hit at q=%0d r=%0d latency %0d", q, r, lat));
      end
    // flush: the same address misses again
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    m0 = misses;
    read(5, d, lat);
    check(misses == m0 + 1 && d == u_mem.mem[5], "miss after flush");
    // fill 4 more lines; the line of address 5 is the oldest and goes
    for (int i = 1; i <= NL; i++) read(200 + 10 * i, d, lat);
    m0 = misses;
    read(6, d, lat);
    check(misses == m0 + 1 && d == u_mem.mem[6], "round-robin replacement");
    // back-to-back hits under back-pressure
    h0 = hits;
    fork
      begin
        for (int i = 0; i < 3; i++) begin
          @(negedge clk); req_valid = 1; req_addr = 7 + i;
          @(posedge clk); while (!req_ready) @(posedge clk);
        end
        #1 req_valid = 0;
      end
      begin
        int got;
        got = 0;
        while (got < 3) begin
          @(negedge clk);
          resp_ready = $urandom_range(1, 0);
          @(posedge clk);
          if (resp_valid && resp_ready) begin
            check(resp_data == u_mem.mem[6 + got + 1], $sformatf("stream word %0d", got));
            got++;
          end
        end
      end
    join
    resp_ready = 1;
    check(hits == h0 + 3, "three hits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
