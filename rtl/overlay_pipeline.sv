// overlay_pipeline: one programmable processing pipeline of the overlay.
//
// An input FIFO channel feeds a linear cascade of NUM_FU time-multiplexed FUs
// with fixed (non-programmable) FU-to-FU links, and the last FU feeds an output
// FIFO channel. Each FU executes one schedule stage of a feed-forward data-flow
// graph, so a graph of depth D uses D FUs; FUs beyond the graph depth are given a
// single bypass instruction and pass data through. The 40-bit context chain runs
// through the FUs in order; FU k answers to tag TAG_BASE + k.
//
// frame_len is the number of input words per kernel iteration: the input FIFO
// releases them to FU 0 as one back-to-back burst when FU 0 is ready. Results
// leave through out_valid/out_data/out_ready one word at a time.
// Back-pressure: each FU issues only when the next FU will be empty by the
// time its results arrive (or the output FIFO has room for a burst), and
// FU 0's ready pauses the input FIFO.
// The structure (FIFO, linear FU cascade, FIFO, daisy-chained instruction
// ports, 8 FUs) is the paper's; the framing input, the FIFO depth and the
// stage-to-stage handshake are this design's.
module overlay_pipeline
  import overlay_pkg::*;
#(
  parameter int unsigned      NUM_FU     = 8,
  parameter logic [TAG_W-1:0] TAG_BASE   = 8'd1,
  parameter int unsigned      FIFO_DEPTH = 64
) (
  input  logic              clk,
  input  logic              rst,
  input  ctx_word_t         ctx_in,
  output ctx_word_t         ctx_out,
  input  logic [5:0]        frame_len,
  input  logic              in_valid,
  input  logic [DATA_W-1:0] in_data,
  output logic              in_ready,
  output logic              out_valid,
  output logic [DATA_W-1:0] out_data,
  input  logic              out_ready
);
  ctx_word_t         ctx   [NUM_FU+1];
  logic              v     [NUM_FU+1];   // v[k]: valid into FU k; v[NUM_FU]: into output FIFO
  logic [DATA_W-1:0] d     [NUM_FU+1];
  logic              rdy   [NUM_FU+1];   // rdy[k]: FU k ready_ahead; rdy[NUM_FU]: output FIFO burst room
  logic              fu0_ready;          // FU 0 strict ready, back-pressure to the input FIFO

  assign ctx[0]  = ctx_in;
  assign ctx_out = ctx[NUM_FU];

  fifo_channel #(.DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst,
    .wr_valid(in_valid), .wr_data(in_data), .wr_ready(in_ready), .burst_ready(),
    .frame_len(frame_len), .rd_ready(fu0_ready), .rd_valid(v[0]), .rd_data(d[0]), .count()
  );

  logic fu_ready [NUM_FU];
  assign fu0_ready = fu_ready[0];

  for (genvar k = 0; k < NUM_FU; k++) begin : g_fu
    tm_fu #(.FU_TAG(TAG_BASE + TAG_W'(k))) u_fu (
      .clk, .rst,
      .ctx_in(ctx[k]), .ctx_out(ctx[k+1]),
      .in_valid(v[k]), .in_data(d[k]), .ready(fu_ready[k]), .ready_ahead(rdy[k]),
      .ds_ready(rdy[k+1]), .out_valid(v[k+1]), .out_data(d[k+1])
    );
  end

  fifo_channel #(.DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst,
    .wr_valid(v[NUM_FU]), .wr_data(d[NUM_FU]), .wr_ready(), .burst_ready(rdy[NUM_FU]),
    .frame_len('0), .rd_ready(out_ready), .rd_valid(out_valid), .rd_data(out_data), .count()
  );
endmodule
