// dma_write: the write module of the central DMA.
//
// It executes write instructions (mc_pkg::dma_wr_instr_t) one after another:
// it selects the named core's output buffer through the network and writes
// count words from it to external memory at addr, addr+stride, ... One word
// per clock when memory and core keep up. Runs independently of the read
// module, so results leave while new operands arrive.
//
// Interface: instruction stream (valid/ready), selection and data stream from
// the network (up_*), word write port to memory (valid/ready), a done pulse
// per finished instruction.
module dma_write
  import mc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  dma_wr_instr_t     in_instr,
  output logic [ID_W-1:0]   up_sel_cluster,
  output logic [ID_W-1:0]   up_sel_core,
  input  logic              up_valid,
  output logic              up_ready,
  input  word_t             up_data,
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [ADDR_W-1:0] mem_wr_addr,
  output word_t             mem_wr_data,
  output logic              idle,
  output logic              done
);

  logic              run;
  dma_wr_instr_t     cur;
  logic [ADDR_W-1:0] addr;
  logic [CNT_W-1:0]  left;

  always_comb begin
    in_ready       = !run;
    idle           = !run;
    up_sel_cluster = cur.cluster;
    up_sel_core    = cur.core;
    mem_wr_valid   = run && up_valid;
    mem_wr_addr    = addr;
    mem_wr_data    = up_data;
    up_ready       = run && mem_wr_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run  <= 1'b0;
      done <= 1'b0;
      cur  <= '0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (in_valid) begin
          cur  <= in_instr;
          addr <= in_instr.addr;
          left <= in_instr.count;
          if (in_instr.count != '0) run <= 1'b1;
          else done <= 1'b1;
        end
      end else if (mem_wr_valid && mem_wr_ready) begin
        addr <= addr + ADDR_W'(cur.stride);
        left <= left - 1'b1;
        if (left == CNT_W'(1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
