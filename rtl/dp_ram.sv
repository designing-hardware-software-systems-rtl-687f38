// dp_ram: dual-port RAM with one write port and one read port.
//
// The core's local memory is built from dual-port block RAMs; this module is
// one such memory, used in the core for the local data memory, for the
// double-buffered B operand buffer and for the configuration memory.
// Port 1 writes wdata to waddr when we is high. Port 2 reads: rdata holds
// mem[raddr] one clock after re high (synchronous read, as a block RAM);
// otherwise rdata keeps its value. A read of the address being written in
// the same cycle returns the old contents.
// Contents are not reset: a block RAM has no reset, and every user writes a
// location before reading it.
module dp_ram #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 8192
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
