// tb_dp_ram: self-checking test of the dual-port RAM. Random writes and reads
// against an array model: one-cycle read latency, rdata held while re is low,
// old data returned when reading the address being written.
module tb_dp_ram;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int W = 16, D = 64;
  logic we, re;
  logic [5:0] waddr, raddr;
  logic [W-1:0] wdata, rdata, exp_q;
  logic [W-1:0] model[D];

  dp_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    // fill every word
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = W'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0; re = 1; raddr = 0;
    exp_q = model[0];
    for (int i = 0; i < 4000; i++) begin
      logic do_re;
      @(negedge clk);
      checks++;
      if (rdata !== exp_q) begin
        failures++;
        if (failures < 10) $display("FAIL rdata %h expected %h", rdata, exp_q);
      end
      we = $urandom_range(1, 0); waddr = 6'($urandom); wdata = W'($urandom);
      do_re = $urandom_range(3, 0) != 0; re = do_re;
      raddr = ($urandom_range(3, 0) == 0) ? waddr : 6'($urandom);
      if (do_re) exp_q = model[raddr];  // old contents on a collision
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
