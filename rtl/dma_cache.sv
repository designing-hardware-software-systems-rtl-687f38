// dma_cache: the cache of the central DMA, for reads that are not
// sequential in external memory.
//
// A request for one word that no line holds (a miss) fetches a burst of
// LINE_WORDS consecutive words starting at the requested word, so the first
// word of the burst is the one asked for: it is passed on as soon as it
// arrives, and the whole burst is kept as a cache line whose base is the
// requested address. A later request for any address base..base+LINE_WORDS-1
// of a valid line is a hit and is answered from the line, one word per clock.
// Lines are fully associative; a miss replaces the lines in turn (round
// robin). flush invalidates every line; the cache does not watch the DMA's
// writes, so the program must flush it before reading data it has written.
//
// Interface: req_valid/req_ready/req_addr in, resp_valid/resp_ready/resp_data
// out (in order, one request outstanding at a time on a miss); a burst read
// port to memory (mem_req_* handshake, then LINE_WORDS words on mem_rvalid,
// which cannot be held off). busy is high while a burst is being received.
// Hit latency: one clock. Miss latency: the memory's burst latency.
//
// The paper gives the burst behaviour and up to 16 lines; line length,
// placement and replacement are this design's choices.
module dma_cache
  import mc_pkg::*;
#(
  parameter int unsigned N_LINES    = 16,
  parameter int unsigned LINE_WORDS = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [ADDR_W-1:0] req_addr,
  output logic              resp_valid,
  input  logic              resp_ready,
  output word_t             resp_data,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [ADDR_W-1:0] mem_req_addr,
  output logic [7:0]        mem_req_len,
  input  logic              mem_rvalid,
  input  word_t             mem_rdata,
  output logic              busy,
  output logic              ev_hit,
  output logic              ev_miss
);

  localparam int unsigned LIW = (N_LINES > 1) ? $clog2(N_LINES) : 1;
  localparam int unsigned OW  = (LINE_WORDS > 1) ? $clog2(LINE_WORDS) : 1;

  typedef enum logic [1:0] {C_IDLE, C_MREQ, C_FILL} cstate_e;

  cstate_e           state;
  word_t             data  [N_LINES][LINE_WORDS];
  logic [ADDR_W-1:0] base  [N_LINES];
  logic              valid [N_LINES];
  logic [LIW-1:0]    victim;
  logic [OW-1:0]     fill_cnt;
  logic [ADDR_W-1:0] miss_addr;
  logic              out_v;
  word_t             out_d;

  logic              hit, out_free, take;
  logic [LIW-1:0]    hit_idx;
  logic [OW-1:0]     hit_off;

  always_comb begin
    hit = 1'b0;
    hit_idx = '0;
    hit_off = '0;
    for (int i = N_LINES - 1; i >= 0; i--) begin
      logic [ADDR_W-1:0] off;
      off = req_addr - base[i];
      if (valid[i] && off < ADDR_W'(LINE_WORDS)) begin
        hit = 1'b1;
        hit_idx = LIW'(i);
        hit_off = off[OW-1:0];
      end
    end
    out_free  = !out_v || resp_ready;
    req_ready = (state == C_IDLE) && out_free && !flush;
    take      = req_valid && req_ready;
    ev_hit    = take && hit;
    ev_miss   = take && !hit;
    mem_req_valid = (state == C_MREQ);
    mem_req_addr  = miss_addr;
    mem_req_len   = 8'(LINE_WORDS);
    resp_valid = out_v;
    resp_data  = out_d;
    busy       = (state != C_IDLE);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= C_IDLE;
      victim <= '0;
      out_v  <= 1'b0;
      for (int i = 0; i < N_LINES; i++) begin
        valid[i] <= 1'b0;
        base[i]  <= '0;
      end
    end else begin
      if (out_v && resp_ready) out_v <= 1'b0;
      case (state)
        C_IDLE: begin
          if (flush) for (int i = 0; i < N_LINES; i++) valid[i] <= 1'b0;
          if (take && hit) begin
            out_v <= 1'b1;
            out_d <= data[hit_idx][hit_off];
          end else if (take) begin
            miss_addr     <= req_addr;
            valid[victim] <= 1'b0;
            state         <= C_MREQ;
          end
        end
        C_MREQ: if (mem_req_ready) begin
          fill_cnt <= '0;
          state    <= C_FILL;
        end
        C_FILL: if (mem_rvalid) begin
          data[victim][fill_cnt] <= mem_rdata;
          if (fill_cnt == '0) begin   // the requested word goes straight on
            out_v <= 1'b1;
            out_d <= mem_rdata;
          end
          fill_cnt <= fill_cnt + 1'b1;
          if (fill_cnt == OW'(LINE_WORDS - 1)) begin
            valid[victim] <= 1'b1;
            base[victim]  <= miss_addr;
            victim        <= (victim == LIW'(N_LINES - 1)) ? '0 : victim + 1'b1;
            state         <= C_IDLE;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // The first word of a burst finds the output register free.
  a_out_free: assert property (@(posedge clk) disable iff (!rst_n)
    (state == C_FILL && mem_rvalid && fill_cnt == '0) |-> !out_v);

endmodule
