// instr_mem: the FU instruction memory, 32 entries of 32 bits.
//
// A single-port LUT RAM: one address serves both the write done once while the
// context is loaded (address = instruction counter) and the reads done while the
// FU executes (address = program counter). The caller multiplexes and registers
// the address. Write is synchronous; read is asynchronous, as in a distributed RAM,
// and the caller registers the read data. The paper builds this memory from four
// RAM32M primitives in single-port mode; here it is a plain array that a synthesis
// tool maps to LUT RAM.
module instr_mem #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned WIDTH = 32
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
  end

  assign rdata = mem[addr];
endmodule
