// ext_mem_model: behavioural model of the external memory and its controller
// as seen by the coprocessor (not synthesizable). Burst reads are served one
// at a time: LATENCY clocks after a request is accepted, len words follow on
// consecutive clocks. Word writes are accepted every clock. Testbenches fill
// and inspect the array mem directly. While rst_n is low (synchronous) the
// model drops any burst in progress and accepts no request.
module ext_mem_model #(
  parameter int unsigned WORDS   = 1 << 16,
  parameter int unsigned LATENCY = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  logic [31:0] rd_req_addr,
  input  logic [7:0]  rd_req_len,
  output logic        rvalid,
  output logic [31:0] rdata,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_addr,
  input  logic [31:0] wr_data
);

  logic [31:0] mem [WORDS];
  logic        busy = 1'b0;
  int          wait_cnt, left;
  logic [31:0] addr;

  assign rd_req_ready = !busy && rst_n;
  assign wr_ready     = 1'b1;

  initial begin
    rvalid = 1'b0;
    rdata  = '0;
  end

  always @(posedge clk) begin
    rvalid <= 1'b0;
    if (!rst_n) begin
      busy <= 1'b0;
    end else if (rd_req_valid && rd_req_ready) begin
      busy     <= 1'b1;
      wait_cnt <= LATENCY;
      left     <= int'(rd_req_len);
      addr     <= rd_req_addr;
    end else if (busy) begin
      if (wait_cnt > 0) wait_cnt <= wait_cnt - 1;
      else begin
        rvalid <= 1'b1;
        rdata  <= mem[addr % WORDS];
        addr   <= addr + 1;
        left   <= left - 1;
        if (left == 1) busy <= 1'b0;
      end
    end
    if (wr_valid && rst_n) mem[wr_addr % WORDS] <= wr_data;
  end

endmodule
