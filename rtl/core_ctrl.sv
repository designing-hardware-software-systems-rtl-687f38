// core_ctrl: controller and address generator of a core.
//
// The controller runs the core's microprogram, held in the configuration
// memory as 64-bit instructions (mc_pkg::core_instr_t, two 32-bit words each,
// low word first). After start it fetches instruction 0 and executes
// instructions in order until OP_HALT, then pulses done. A start that
// arrives while the program runs is remembered and restarts the program at
// its end, so the host can queue the next block of work.
//
//   OP_MATMUL x,y,k  Block matrix product with inner block size 1: for
//                    q = 0..k-1 it takes a row of x elements of B from bF
//                    into one half of the double-buffered B buffer, then for
//                    each of y elements a_r arriving on aF performs
//                    C[r][j] += a_r * B[j], j = 0..x-1, in local memory
//                    words r*x + j (q = 0 writes a_r*B[j] + 0). A separate
//                    loader fills the other half of the B buffer with the
//                    next row while the products of the current one run.
//   OP_SPMV rows,cols  Sparse matrix-vector product of one core's rows, held
//                    column by column: local words 0..rows-1 are cleared;
//                    then for each column aF delivers x_j, the number n_j of
//                    this core's nonzeros in the column, and n_j pairs
//                    (local row number, value); each pair does
//                    y[row] += value * x_j. One stream carries all of it, so
//                    the DMA can send a core's whole record list with one
//                    instruction; a nonzero takes two clocks.
//   OP_STORE base,count  Sends local words base..base+count-1 to the output
//                    buffer.
//
// Address generation is a set of loop counters (q, r, j and a running C
// address) rather than multipliers. The arithmetic pipeline has three steps:
// issue (read the accumulator from local memory and the B operand from the B
// buffer), multiply-add (the fp_fma result is registered) and write back. It
// starts one fused multiply-add per clock when operands are present, the
// paper's peak of two floating-point operations per core and cycle. An issue
// whose accumulator address is still in the pipeline waits (read-after-write
// stall); block products with x*y >= 3 never wait.
//
// The paper names the controller, the address generator and the
// configuration memory and describes the matrix algorithms; the instruction
// set, its encoding and the pipeline are this design's own.
module core_ctrl
  import mc_pkg::*;
#(
  parameter int unsigned LMEM_WORDS = 8192,
  parameter int unsigned BBUF_X     = 64,
  parameter int unsigned CFG_WORDS  = 32,
  parameter int unsigned OUT_DEPTH  = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  // configuration memory read port (1 cycle latency)
  output logic        cfg_re,
  output logic [$clog2(CFG_WORDS)-1:0] cfg_raddr,
  input  word_t       cfg_rdata,
  // input buffers, show-ahead
  input  logic        a_valid,
  input  word_t       a_data,
  output logic        a_pop,
  input  logic        b_valid,
  input  word_t       b_data,
  output logic        b_pop,
  // output buffer
  input  logic [$clog2(OUT_DEPTH+1)-1:0] o_level,
  output logic        o_push,
  output word_t       o_data,
  // local data memory
  output logic        mem_re,
  output logic [$clog2(LMEM_WORDS)-1:0] mem_raddr,
  input  word_t       mem_rdata,
  output logic        mem_we,
  output logic [$clog2(LMEM_WORDS)-1:0] mem_waddr,
  output word_t       mem_wdata,
  // B operand buffer, two halves of BBUF_X words
  output logic        bb_we,
  output logic [$clog2(2*BBUF_X)-1:0] bb_waddr,
  output word_t       bb_wdata,
  output logic        bb_re,
  output logic [$clog2(2*BBUF_X)-1:0] bb_raddr,
  input  word_t       bb_rdata,
  // arithmetic unit
  output word_t       fma_a,
  output word_t       fma_b,
  output word_t       fma_c,
  input  word_t       fma_r,
  // event strobes, for performance counting
  output logic        ev_fma,      // one multiply-add issued
  output logic        ev_raw_stall,// an issue waited for a write-back
  output logic        ev_overlap   // B row loaded while products run
);

  localparam int unsigned LAW = $clog2(LMEM_WORDS);
  localparam int unsigned BAW = $clog2(2*BBUF_X);
  localparam int unsigned CAW = $clog2(CFG_WORDS);

  typedef enum logic [3:0] {
    S_IDLE, S_F0, S_F1, S_F2, S_MM, S_SP_CLR, S_SP_X, S_SP_N, S_SP_ROW, S_SP_NZ, S_ST, S_DRAIN
  } state_e;

  state_e            state;
  logic [CAW-2:0]    pc;
  word_t             instr_lo;
  core_instr_t       ins;

  // operation fields
  logic [FLD_W-1:0]  f_x, f_y, f_k;
  // MATMUL compute counters
  logic [FLD_W-1:0]  mm_q, mm_r, mm_j;
  logic [LAW-1:0]    mm_caddr;
  // MATMUL B loader
  logic              ld_active;
  logic [FLD_W-1:0]  ld_q, ld_j;
  logic [1:0]        bank_full;
  // SPMV
  logic [FLD_W-1:0]  sp_col, sp_left, clr_addr;
  word_t             sp_x;
  logic [LAW-1:0]    sp_row;
  logic              start_pend;
  // STORE
  logic [LAW-1:0]    st_addr;
  logic [FLD_W-1:0]  st_left;

  // pipeline
  logic              s1_v, s1_first, s1_bb, s1_st;
  logic [LAW-1:0]    s1_addr;
  word_t             s1_a, s1_b;
  logic              s2_v;
  logic [LAW-1:0]    s2_addr;
  word_t             s2_d;

  // issue-side combinational signals
  logic              iss, iss_mm, iss_sp, iss_st, hazard, ld_wr, clr_wr;
  logic [LAW-1:0]    iss_addr;

  assign ins = core_instr_t'({cfg_rdata, instr_lo});

  function automatic logic hit(input logic [LAW-1:0] ad, input logic v1, input logic [LAW-1:0] a1,
                               input logic v2, input logic [LAW-1:0] a2);
    return (v1 && a1 == ad) || (v2 && a2 == ad);
  endfunction

  always_comb begin
    iss_addr = '0;
    hazard   = 1'b0;
    iss_mm   = 1'b0;
    iss_sp   = 1'b0;
    iss_st   = 1'b0;
    case (state)
      S_MM: begin
        iss_addr = mm_caddr;
        hazard   = hit(mm_caddr, s1_v && !s1_st, s1_addr, s2_v, s2_addr);
        iss_mm   = bank_full[mm_q[0]] && a_valid && !hazard;
      end
      S_SP_NZ: begin
        iss_addr = sp_row;
        hazard   = hit(sp_row, s1_v && !s1_st, s1_addr, s2_v, s2_addr);
        iss_sp   = a_valid && !hazard;
      end
      S_ST: begin
        iss_addr = st_addr;
        iss_st   = (32'(o_level) + (s1_v && s1_st ? 32'd1 : 32'd0) + 32'd1) <= OUT_DEPTH;
      end
      default: ;
    endcase
    iss = iss_mm || iss_sp || iss_st;

    ld_wr  = ld_active && !bank_full[ld_q[0]] && b_valid;
    clr_wr = (state == S_SP_CLR);

    // configuration memory
    cfg_re    = (state == S_F0) || (state == S_F1);
    cfg_raddr = (state == S_F0) ? {pc, 1'b0} : {pc, 1'b1};

    // local memory
    mem_re    = iss;
    mem_raddr = iss_addr;
    mem_we    = s2_v || clr_wr;
    mem_waddr = s2_v ? s2_addr : clr_addr[LAW-1:0];
    mem_wdata = s2_v ? s2_d : '0;

    // B buffer
    bb_we    = ld_wr;
    bb_waddr = BAW'(ld_q[0] ? BBUF_X : 0) + BAW'(ld_j);
    bb_wdata = b_data;
    bb_re    = iss_mm;
    bb_raddr = BAW'(mm_q[0] ? BBUF_X : 0) + BAW'(mm_j);

    // input buffers
    a_pop = (iss_mm && (mm_j == f_x - 1'b1)) || iss_sp ||
            (a_valid && (state == S_SP_X || state == S_SP_N || state == S_SP_ROW));
    b_pop = ld_wr;

    // arithmetic unit
    fma_a = s1_a;
    fma_b = s1_bb ? bb_rdata : s1_b;
    fma_c = s1_first ? '0 : mem_rdata;

    // output buffer
    o_push = s1_v && s1_st;
    o_data = mem_rdata;

    ev_fma       = iss_mm || iss_sp;
    ev_raw_stall = hazard && (state == S_MM || (state == S_SP_NZ && a_valid));
    ev_overlap   = ld_wr && iss_mm;
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      done      <= 1'b0;
      pc        <= '0;
      s1_v      <= 1'b0;
      s2_v      <= 1'b0;
      ld_active <= 1'b0;
      bank_full <= '0;
      start_pend <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && state != S_IDLE) start_pend <= 1'b1;

      // pipeline advance
      s1_v     <= iss;
      s1_st    <= iss_st;
      s1_addr  <= iss_addr;
      s1_first <= iss_mm && (mm_q == '0);
      s1_bb    <= iss_mm;
      s1_a     <= a_data;
      s1_b     <= sp_x;
      s2_v     <= s1_v && !s1_st;
      s2_addr  <= s1_addr;
      s2_d     <= fma_r;

      // B row loader
      if (ld_wr) begin
        if (ld_j == f_x - 1'b1) begin
          ld_j <= '0;
          bank_full[ld_q[0]] <= 1'b1;
          ld_q <= ld_q + 1'b1;
          if (ld_q == f_k - 1'b1) ld_active <= 1'b0;
        end else begin
          ld_j <= ld_j + 1'b1;
        end
      end

      case (state)
        S_IDLE: if (start) begin
          pc    <= '0;
          state <= S_F0;
        end
        S_F0: state <= S_F1;
        S_F1: begin
          instr_lo <= cfg_rdata;
          state    <= S_F2;
        end
        S_F2: begin
          f_x <= ins.f1;
          f_y <= ins.f2;
          f_k <= ins.f3;
          unique case (ins.op)
            OP_MATMUL: begin
              if (ins.f1 == '0 || ins.f2 == '0 || ins.f3 == '0) state <= S_DRAIN;
              else begin
                mm_q <= '0; mm_r <= '0; mm_j <= '0; mm_caddr <= '0;
                ld_active <= 1'b1; ld_q <= '0; ld_j <= '0;
                bank_full <= '0;
                state <= S_MM;
              end
            end
            OP_SPMV: begin
              sp_col   <= '0;
              clr_addr <= '0;
              if (ins.f2 == '0) state <= S_DRAIN;
              else if (ins.f1 == '0) state <= S_SP_X;
              else state <= S_SP_CLR;
            end
            OP_STORE: begin
              st_addr <= ins.f1[LAW-1:0];
              st_left <= ins.f2;
              state   <= (ins.f2 == '0) ? S_DRAIN : S_ST;
            end
            default: begin   // OP_HALT and unused codes
              done <= 1'b1;
              if (start_pend) begin   // a start that came while busy
                start_pend <= 1'b0;
                pc    <= '0;
                state <= S_F0;
              end else begin
                state <= S_IDLE;
              end
            end
          endcase
        end
        S_MM: if (iss_mm) begin
          if (mm_j == f_x - 1'b1) begin
            mm_j <= '0;
            if (mm_r == f_y - 1'b1) begin
              mm_r     <= '0;
              mm_caddr <= '0;
              bank_full[mm_q[0]] <= 1'b0;
              mm_q     <= mm_q + 1'b1;
              if (mm_q == f_k - 1'b1) state <= S_DRAIN;
            end else begin
              mm_r     <= mm_r + 1'b1;
              mm_caddr <= mm_caddr + 1'b1;
            end
          end else begin
            mm_j     <= mm_j + 1'b1;
            mm_caddr <= mm_caddr + 1'b1;
          end
        end
        S_SP_CLR: begin
          clr_addr <= clr_addr + 1'b1;
          if (clr_addr == f_x - 1'b1) state <= S_SP_X;
        end
        S_SP_X: if (a_valid) begin
          sp_x  <= a_data;
          state <= S_SP_N;
        end
        S_SP_N: if (a_valid) begin
          sp_left <= a_data[FLD_W-1:0];
          if (a_data == '0) begin
            sp_col <= sp_col + 1'b1;
            state  <= (sp_col == f_y - 1'b1) ? S_DRAIN : S_SP_X;
          end else begin
            state <= S_SP_ROW;
          end
        end
        S_SP_ROW: if (a_valid) begin
          sp_row <= a_data[LAW-1:0];
          state  <= S_SP_NZ;
        end
        S_SP_NZ: if (iss_sp) begin
          sp_left <= sp_left - 1'b1;
          if (sp_left == FLD_W'(1)) begin
            sp_col <= sp_col + 1'b1;
            state  <= (sp_col == f_y - 1'b1) ? S_DRAIN : S_SP_X;
          end else begin
            state <= S_SP_ROW;
          end
        end
        S_ST: if (iss_st) begin
          st_addr <= st_addr + 1'b1;
          st_left <= st_left - 1'b1;
          if (st_left == FLD_W'(1)) state <= S_DRAIN;
        end
        S_DRAIN: if (!s1_v && !s2_v && !ld_active) begin
          pc    <= pc + 1'b1;
          state <= S_F0;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The accumulator read of an issue never overtakes a pending write-back.
  a_no_raw: assert property (@(posedge clk) disable iff (!rst_n)
    (iss_mm || iss_sp) |-> !((s1_v && !s1_st && s1_addr == iss_addr) || (s2_v && s2_addr == iss_addr)));

endmodule
