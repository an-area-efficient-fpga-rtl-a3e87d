// context_mem: the overlay's context memory and its loader.
//
// A 40-bit wide block RAM holds the context words (8-bit FU tag + 32-bit
// instruction) of the kernels, written by the host through host_we/addr/wdata.
// A pulse on start with len = n streams words 0 .. n-1, one per cycle, onto the
// FU daisy chain (ctx_out); FUs whose tag matches keep the instruction. When no
// word is being sent ctx_out carries tag 0, an empty slot. busy is high from the
// cycle after start until the last word has been read. The read is synchronous,
// so word k appears on ctx_out k+2 cycles after start.
// The paper gives the memory (one BRAM, 40-bit words, shared by all pipelines)
// and the one-word-per-cycle rate; depth and the start/len interface are this
// design's.
module context_mem
  import overlay_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       host_we,
  input  logic [$clog2(DEPTH)-1:0]   host_addr,
  input  ctx_word_t                  host_wdata,
  input  logic                       start,
  input  logic [$clog2(DEPTH+1)-1:0] len,
  output logic                       busy,
  output ctx_word_t                  ctx_out
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(DEPTH+1);

  ctx_word_t      mem [DEPTH];
  ctx_word_t      rdata;
  logic [LW-1:0]  ptr;
  logic           rd_q;

  always_ff @(posedge clk) begin
    if (host_we) mem[host_addr] <= host_wdata;
  end

  always_ff @(posedge clk) begin
    rdata <= mem[ptr[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      ptr  <= '0;
      rd_q <= 1'b0;
    end else begin
      rd_q <= busy;
      if (start && !busy) begin
        busy <= (len != '0);
        ptr  <= '0;
      end else if (busy) begin
        if (ptr == len - 1'b1) busy <= 1'b0;
        else                   ptr  <= ptr + 1'b1;
      end
    end
  end

  assign ctx_out = rd_q ? rdata : '0;
endmodule
