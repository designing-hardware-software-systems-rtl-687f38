// mc_pkg: types and constants shared by the many-core coprocessor.
//
// The coprocessor moves 32-bit words (IEEE-754 single precision numbers or
// small integers such as row indices). Three kinds of record travel between
// its parts:
//   * down_pkt_t  - a word going from the central DMA over the interconnection
//                   network to one core, to every core (broadcast), or to the
//                   local PE of a cluster (configuration words and start).
//   * core_instr_t- one 64-bit instruction of a core's microprogram, held as two
//                   32-bit words in the core's configuration memory.
//   * dma_rd_instr_t / dma_wr_instr_t - the micro instructions the host
//                   processor gives the DMA read and write modules.
// The paper fixes none of these encodings; they are this design's own choice.
package mc_pkg;

  localparam int unsigned WORD_W = 32;
  localparam int unsigned ID_W   = 8;   // width of cluster and core numbers in a packet
  localparam int unsigned FLD_W  = 20;  // width of one field of a core instruction
  localparam int unsigned CNT_W  = 20;  // width of DMA element counts and strides
  localparam int unsigned ADDR_W = 32;  // external memory word address

  typedef logic [WORD_W-1:0] word_t;

  // What a down-going word is for.
  typedef enum logic [1:0] {
    PK_A     = 2'd0,   // into the core's aF input buffer
    PK_B     = 2'd1,   // into the core's bF input buffer
    PK_CFG   = 2'd2,   // next word of the core's microprogram (to the local PE)
    PK_START = 2'd3    // start the core's microprogram at instruction 0
  } pkt_kind_e;

  typedef struct packed {
    pkt_kind_e        kind;
    logic             bcast;    // 1: every core of every cluster
    logic [ID_W-1:0]  cluster;
    logic [ID_W-1:0]  core;
    word_t            data;
  } down_pkt_t;

  // Core microprogram operations.
  typedef enum logic [3:0] {
    OP_HALT   = 4'd0,  // end of program
    OP_MATMUL = 4'd1,  // f1=x, f2=y, f3=k: C(y x x) = sum over k of a(y) * b(x)^T
    OP_SPMV   = 4'd2,  // f1=rows held, f2=columns: y[row] += val * x_col
    OP_STORE  = 4'd3   // f1=base, f2=count: send local memory words to the output buffer
  } core_op_e;

  typedef struct packed {
    core_op_e         op;
    logic [FLD_W-1:0] f1;
    logic [FLD_W-1:0] f2;
    logic [FLD_W-1:0] f3;
  } core_instr_t;    // 64 bits: word 2i holds bits 31:0, word 2i+1 bits 63:32

  // DMA read instruction: read count words from addr, addr+stride, ... and
  // send them as packets of the given kind to the given destination. A
  // PK_START instruction reads nothing and sends one packet.
  typedef struct packed {
    pkt_kind_e         kind;
    logic              bcast;
    logic [ID_W-1:0]   cluster;
    logic [ID_W-1:0]   core;
    logic [ADDR_W-1:0] addr;
    logic [CNT_W-1:0]  count;
    logic [CNT_W-1:0]  stride;
  } dma_rd_instr_t;

  // DMA write instruction: take count words from the output buffer of the
  // given core and write them to addr, addr+stride, ...
  typedef struct packed {
    logic [ID_W-1:0]   cluster;
    logic [ID_W-1:0]   core;
    logic [ADDR_W-1:0] addr;
    logic [CNT_W-1:0]  count;
    logic [CNT_W-1:0]  stride;
  } dma_wr_instr_t;

  // Event counters of the whole coprocessor, readable by the host.
  typedef struct packed {
    logic [31:0] fma_ops;      // multiply-adds issued, all cores
    logic [31:0] raw_stalls;   // core issue cycles lost to read-after-write
    logic [31:0] overlaps;     // B words loaded while products ran
    logic [31:0] cache_hits;
    logic [31:0] cache_misses;
    logic [31:0] bursts;       // sequential bursts issued by the DMA
    logic [31:0] net_stalls;   // cycles the network held off the DMA
  } perf_t;

endpackage
