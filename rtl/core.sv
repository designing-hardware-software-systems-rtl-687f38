// core: one processing core of the many-core coprocessor.
//
// A core is an arithmetic unit (a single-precision fused multiply-add), a
// local data memory, input buffers aF and bF that receive words from the
// network, an output buffer that sends words back, and a controller with its
// address generator and configuration memory that runs a microprogram (see
// core_ctrl for the instructions). Words from aF and bF feed the arithmetic
// unit directly or are stored (the B rows of a block product go into a
// double-buffered B buffer); results go to the local memory, and STORE
// streams local memory into the output buffer.
//
// Interface: three valid/ready streams (a_in, b_in, o_out), a write port
// into the configuration memory (cfg_we, cfg_waddr, cfg_wdata) and a start
// pulse; busy stays high from start to the end of the program, done pulses
// once there. Peak rate is one multiply-add per clock.
//
// The block structure follows the paper's figure of the core unit. Buffer
// depths, the configuration memory size and the separate B buffer (the paper
// keeps B in the local memory; a separate buffer lets the products read B and
// the accumulator in the same cycle while the next B row is written) are
// this design's choices.
module core
  import mc_pkg::*;
#(
  parameter int unsigned LMEM_WORDS = 8192,  // 32 KB of 32-bit words
  parameter int unsigned BBUF_X     = 64,
  parameter int unsigned CFG_WORDS  = 32,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  a_in_valid,
  output logic  a_in_ready,
  input  word_t a_in_data,
  input  logic  b_in_valid,
  output logic  b_in_ready,
  input  word_t b_in_data,
  output logic  o_out_valid,
  input  logic  o_out_ready,
  output word_t o_out_data,
  input  logic  cfg_we,
  input  logic [$clog2(CFG_WORDS)-1:0] cfg_waddr,
  input  word_t cfg_wdata,
  input  logic  start,
  output logic  busy,
  output logic  done,
  output logic  ev_fma,
  output logic  ev_raw_stall,
  output logic  ev_overlap
);

  localparam int unsigned LAW = $clog2(LMEM_WORDS);
  localparam int unsigned BAW = $clog2(2*BBUF_X);
  localparam int unsigned CAW = $clog2(CFG_WORDS);
  localparam int unsigned LW  = $clog2(FIFO_DEPTH+1);

  logic           a_valid, a_pop, b_valid, b_pop, o_push;
  word_t          a_data, b_data, o_data;
  logic [LW-1:0]  o_level, a_level, b_level;
  logic           cfg_re;
  logic [CAW-1:0] cfg_raddr;
  word_t          cfg_rdata;
  logic           mem_re, mem_we, bb_re, bb_we;
  logic [LAW-1:0] mem_raddr, mem_waddr;
  word_t          mem_rdata, mem_wdata, bb_wdata, bb_rdata;
  logic [BAW-1:0] bb_raddr, bb_waddr;
  word_t          fma_a, fma_b, fma_c, fma_r;
  logic           o_wr_ready;

  sync_fifo #(.T(word_t), .DEPTH(FIFO_DEPTH)) u_af (
    .clk, .rst_n, .wr_valid(a_in_valid), .wr_ready(a_in_ready), .wr_data(a_in_data),
    .rd_valid(a_valid), .rd_ready(a_pop), .rd_data(a_data), .level(a_level));

  sync_fifo #(.T(word_t), .DEPTH(FIFO_DEPTH)) u_bf (
    .clk, .rst_n, .wr_valid(b_in_valid), .wr_ready(b_in_ready), .wr_data(b_in_data),
    .rd_valid(b_valid), .rd_ready(b_pop), .rd_data(b_data), .level(b_level));

  sync_fifo #(.T(word_t), .DEPTH(FIFO_DEPTH)) u_of (
    .clk, .rst_n, .wr_valid(o_push), .wr_ready(o_wr_ready), .wr_data(o_data),
    .rd_valid(o_out_valid), .rd_ready(o_out_ready), .rd_data(o_out_data), .level(o_level));

  dp_ram #(.WIDTH(32), .DEPTH(CFG_WORDS)) u_cfg (
    .clk, .we(cfg_we), .waddr(cfg_waddr), .wdata(cfg_wdata),
    .re(cfg_re), .raddr(cfg_raddr), .rdata(cfg_rdata));

  dp_ram #(.WIDTH(32), .DEPTH(LMEM_WORDS)) u_lmem (
    .clk, .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata));

  dp_ram #(.WIDTH(32), .DEPTH(2*BBUF_X)) u_bbuf (
    .clk, .we(bb_we), .waddr(bb_waddr), .wdata(bb_wdata),
    .re(bb_re), .raddr(bb_raddr), .rdata(bb_rdata));

  fp_fma u_fpu (.a(fma_a), .b(fma_b), .c(fma_c), .r(fma_r));

  core_ctrl #(.LMEM_WORDS(LMEM_WORDS), .BBUF_X(BBUF_X), .CFG_WORDS(CFG_WORDS),
              .OUT_DEPTH(FIFO_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .cfg_re, .cfg_raddr, .cfg_rdata,
    .a_valid, .a_data, .a_pop, .b_valid, .b_data, .b_pop,
    .o_level, .o_push, .o_data,
    .mem_re, .mem_raddr, .mem_rdata, .mem_we, .mem_waddr, .mem_wdata,
    .bb_we, .bb_waddr, .bb_wdata, .bb_re, .bb_raddr, .bb_rdata,
    .fma_a, .fma_b, .fma_c, .fma_r,
    .ev_fma, .ev_raw_stall, .ev_overlap);

  // The controller only pushes when the output buffer has room.
  a_out_room: assert property (@(posedge clk) disable iff (!rst_n) o_push |-> o_wr_ready);

endmodule
