// reg_file: the FU register file, 32 entries of 32 bits.
//
// Port A is a read/write port: it writes streamed input data at the data counter
// address while the FU loads, and reads the first operand while it executes. Port
// B only reads (second operand). Loading and execution never overlap, so one
// shared port suffices, as the paper does with RAM32M primitives in 1 read/write +
// 1 read mode. Writes are synchronous; reads are asynchronous and the caller
// registers them.
module reg_file #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned WIDTH = 32
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr_a,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] addr_b,
  output logic [WIDTH-1:0]         rdata_a,
  output logic [WIDTH-1:0]         rdata_b
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr_a] <= wdata;
  end

  assign rdata_a = mem[addr_a];
  assign rdata_b = mem[addr_b];
endmodule
