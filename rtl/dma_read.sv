// dma_read: the read module of the central DMA.
//
// It executes read instructions (mc_pkg::dma_rd_instr_t) one after another:
// read count words at addr, addr+stride, addr+2*stride, ... from external
// memory and send each as a network packet of the instruction's kind to its
// destination (one core, or every core when broadcast). Sequential reads
// (stride 1) go to memory as bursts of up to MAX_BURST words into a burst
// buffer; a burst is requested only when the buffer has room for all of it,
// since memory data cannot be held off. Any other stride goes word by word
// through the DMA cache, which turns each miss into a burst starting at the
// requested word. A PK_START instruction reads nothing and sends one packet.
//
// Interface: instruction stream (valid/ready), burst read port to memory,
// packet stream to the network (valid/ready), a done pulse per finished
// instruction and event strobes. Up to one packet per clock.
//
// The paper says the DMA is driven by micro instructions from the host and
// uses its cache for non-sequential data; the instruction format and burst
// sizes are this design's.
module dma_read
  import mc_pkg::*;
#(
  parameter int unsigned N_LINES    = 16,
  parameter int unsigned LINE_WORDS = 8,
  parameter int unsigned MAX_BURST  = 16,
  parameter int unsigned BUF_DEPTH  = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cache_flush,
  input  logic              in_valid,
  output logic              in_ready,
  input  dma_rd_instr_t     in_instr,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [ADDR_W-1:0] mem_req_addr,
  output logic [7:0]        mem_req_len,
  input  logic              mem_rvalid,
  input  word_t             mem_rdata,
  output logic              dn_valid,
  input  logic              dn_ready,
  output down_pkt_t         dn_pkt,
  output logic              idle,
  output logic              done,
  output logic              ev_hit,
  output logic              ev_miss,
  output logic              ev_burst
);

  localparam int unsigned LW = $clog2(BUF_DEPTH+1);

  typedef enum logic [1:0] {R_IDLE, R_SEQ, R_CACHE, R_START} rstate_e;

  rstate_e           state;
  dma_rd_instr_t     cur;
  logic [ADDR_W-1:0] addr;
  logic [CNT_W-1:0]  req_left, out_left;
  logic [LW:0]       outstanding;

  // burst buffer
  logic          bb_wr, bb_rd_valid, bb_rd_ready, bb_wr_ready;
  word_t         bb_rd_data;
  logic [LW-1:0] bb_level;
  // cache
  logic          c_req_valid, c_req_ready, c_resp_valid, c_resp_ready, c_busy;
  word_t         c_resp_data;
  logic          c_mreq_valid, c_mreq_ready, c_rvalid;
  logic [ADDR_W-1:0] c_mreq_addr;
  logic [7:0]    c_mreq_len;

  logic [CNT_W-1:0] blen;
  logic          burst_go, sent;

  sync_fifo #(.T(word_t), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n, .wr_valid(bb_wr), .wr_ready(bb_wr_ready), .wr_data(mem_rdata),
    .rd_valid(bb_rd_valid), .rd_ready(bb_rd_ready), .rd_data(bb_rd_data), .level(bb_level));

  dma_cache #(.N_LINES(N_LINES), .LINE_WORDS(LINE_WORDS)) u_cache (
    .clk, .rst_n, .flush(cache_flush && state == R_IDLE),
    .req_valid(c_req_valid), .req_ready(c_req_ready), .req_addr(addr),
    .resp_valid(c_resp_valid), .resp_ready(c_resp_ready), .resp_data(c_resp_data),
    .mem_req_valid(c_mreq_valid), .mem_req_ready(c_mreq_ready),
    .mem_req_addr(c_mreq_addr), .mem_req_len(c_mreq_len),
    .mem_rvalid(c_rvalid), .mem_rdata(mem_rdata),
    .busy(c_busy), .ev_hit, .ev_miss);

  always_comb begin
    blen     = (req_left < CNT_W'(MAX_BURST)) ? req_left : CNT_W'(MAX_BURST);
    burst_go = (state == R_SEQ) && (req_left != '0) &&
               (32'(bb_level) + 32'(outstanding) + 32'(blen) <= BUF_DEPTH);

    mem_req_valid = (state == R_CACHE) ? c_mreq_valid : burst_go;
    mem_req_addr  = (state == R_CACHE) ? c_mreq_addr  : addr;
    mem_req_len   = (state == R_CACHE) ? c_mreq_len   : 8'(blen);
    c_mreq_ready  = (state == R_CACHE) && mem_req_ready;
    c_rvalid      = mem_rvalid && c_busy;     // a fill may outlive its instruction
    bb_wr         = mem_rvalid && !c_busy;
    ev_burst      = burst_go && mem_req_ready;

    c_req_valid   = (state == R_CACHE) && (req_left != '0);

    dn_pkt.kind    = cur.kind;
    dn_pkt.bcast   = cur.bcast;
    dn_pkt.cluster = cur.cluster;
    dn_pkt.core    = cur.core;
    case (state)
      R_SEQ:   begin dn_valid = bb_rd_valid;  dn_pkt.data = bb_rd_data; end
      R_CACHE: begin dn_valid = c_resp_valid; dn_pkt.data = c_resp_data; end
      R_START: begin dn_valid = 1'b1;         dn_pkt.data = '0; end
      default: begin dn_valid = 1'b0;         dn_pkt.data = '0; end
    endcase
    bb_rd_ready  = (state == R_SEQ) && dn_ready;
    c_resp_ready = (state == R_CACHE) && dn_ready;
    sent         = dn_valid && dn_ready;

    in_ready = (state == R_IDLE) && !c_busy;
    idle     = (state == R_IDLE) && !c_busy;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= R_IDLE;
      done        <= 1'b0;
      outstanding <= '0;
    end else begin
      done <= 1'b0;
      outstanding <= outstanding + (ev_burst ? (LW+1)'(blen) : '0) - ((bb_wr) ? (LW+1)'(1) : '0);
      case (state)
        R_IDLE: if (in_valid && !c_busy) begin
          cur      <= in_instr;
          addr     <= in_instr.addr;
          req_left <= in_instr.count;
          out_left <= in_instr.count;
          if (in_instr.kind == PK_START)      state <= R_START;
          else if (in_instr.count == '0)      done  <= 1'b1;
          else if (in_instr.stride == CNT_W'(1)) state <= R_SEQ;
          else                                state <= R_CACHE;
        end
        R_SEQ: begin
          if (ev_burst) begin
            addr     <= addr + ADDR_W'(blen);
            req_left <= req_left - blen;
          end
        end
        R_CACHE: begin
          if (c_req_valid && c_req_ready) begin
            addr     <= addr + ADDR_W'(cur.stride);
            req_left <= req_left - 1'b1;
          end
        end
        R_START: if (dn_ready) begin
          done  <= 1'b1;
          state <= R_IDLE;
        end
        default: state <= R_IDLE;
      endcase
      if ((state == R_SEQ || state == R_CACHE) && sent) begin
        out_left <= out_left - 1'b1;
        if (out_left == CNT_W'(1)) begin
          done  <= 1'b1;
          state <= R_IDLE;
        end
      end
    end
  end

endmodule
