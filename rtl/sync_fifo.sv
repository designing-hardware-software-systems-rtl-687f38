// sync_fifo: single-clock first-in first-out buffer.
//
// Used for the input buffers aF and bF of each core, for the core's output
// buffer, and for the DMA's instruction queues and burst buffer. The head
// word is visible on rd_data whenever rd_valid is high (show-ahead); a word
// is removed in a cycle with rd_valid && rd_ready and added in a cycle with
// wr_valid && wr_ready. Writing into a full buffer and reading from an empty
// one are refused by the handshake, so neither can corrupt it. A read and a
// write may happen in the same cycle, also when the buffer is full, since the
// word read frees the slot; when empty a written word appears on the next
// cycle. level counts the stored words.
//
// The paper names the buffers; their depth and handshake are this design's
// choice. Storage is a plain array, a synchronous active-low
// reset clears only the pointers.
module sync_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic wr_valid,
  output logic wr_ready,
  input  T     wr_data,
  output logic rd_valid,
  input  logic rd_ready,
  output T     rd_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                         mem [DEPTH];
  logic [AW-1:0]            rp, wp;
  logic [$clog2(DEPTH+1)-1:0] cnt;
  logic                     do_wr, do_rd;

  assign rd_valid = (cnt != 0);
  assign wr_ready = (32'(cnt) < DEPTH) || rd_ready;
  assign rd_data  = mem[rp];
  assign level    = cnt;
  assign do_wr    = wr_valid && wr_ready;
  assign do_rd    = rd_valid && rd_ready;

  function automatic logic [AW-1:0] nxt(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rp  <= '0;
      wp  <= '0;
      cnt <= '0;
    end else begin
      if (do_wr) wp <= nxt(wp);
      if (do_rd) rp <= nxt(rp);
      if (do_wr && !do_rd) cnt <= cnt + 1'b1;
      else if (do_rd && !do_wr) cnt <= cnt - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) 32'(cnt) <= DEPTH);

endmodule
