// tb_sync_fifo: self-checking test of the FIFO buffer. Random pushes and
// pops against a queue model; checks order, the full and empty handshake,
// the level count, and that a push into a full buffer is accepted only when
// a pop frees a slot in the same cycle.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int D = 4;
  logic wr_valid, wr_ready, rd_valid, rd_ready;
  logic [31:0] wr_data, rd_data;
  logic [2:0] level;

  sync_fifo #(.T(logic [31:0]), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0, fulls = 0, empties = 0;
  logic [31:0] model[$];

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

  initial begin
    wr_valid = 0; rd_ready = 0; wr_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!rd_valid && level == 0, "empty after reset");
    for (int i = 0; i < 3000; i++) begin
      // phases: mostly push, mostly pop, mixed
      int ph;
      ph = (i / 200) % 3;
      wr_valid = (ph == 0) ? ($urandom_range(9, 0) < 8) : (ph == 1) ? ($urandom_range(9, 0) < 2) : $urandom_range(1, 0);
      rd_ready = (ph == 1) ? ($urandom_range(9, 0) < 8) : (ph == 0) ? ($urandom_range(9, 0) < 2) : $urandom_range(1, 0);
      wr_data  = $urandom;
      #1;
      check(rd_valid == (model.size() > 0), "rd_valid");
      check(wr_ready == (model.size() < D || rd_ready), "wr_ready");
      check(level == 3'(model.size()), "level");
      if (rd_valid) check(rd_data == model[0], $sformatf("data %h expected %h", rd_data, model[0]));
      if (model.size() == D) fulls++;
      if (model.size() == 0) empties++;
      @(posedge clk);
      if (rd_valid && rd_ready) void'(model.pop_front());
      if (wr_valid && wr_ready) model.push_back(wr_data);
      @(negedge clk);
    end
    check(fulls > 0 && empties > 0, "full and empty both reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
