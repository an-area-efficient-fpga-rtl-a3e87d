// fifo_channel: distributed-RAM FIFO used at the input and the output of an
// overlay pipeline.
//
// Write side: wr_valid/wr_data push one word per cycle. wr_ready is high while at
// least two entries are free (one word may be in flight from a synchronous
// memory read); burst_ready is high while at least BURST entries are free, which
// is what an FU checks before it issues a burst of up to 32 results.
//
// Read side, two modes selected at run time by frame_len:
//   frame_len = 0 : word streaming, rd_valid = not empty, a word is popped in
//                   every cycle with rd_valid and rd_ready high.
//   frame_len = n : framed, for feeding the first FU. When idle, the FIFO holds at
//                   least n words and rd_ready is high, it emits n words on n
//                   consecutive cycles without looking at rd_ready again, then
//                   leaves rd_valid low for at least one cycle. The FU sees the
//                   low valid as the end of its load phase.
// The read data comes from an asynchronous read of the array. The paper gives
// only the function (a distributed-RAM FIFO channel, paused by back-pressure from
// the first FU); depth, framing and the ready thresholds are this design's.
module fifo_channel
  import overlay_pkg::*;
#(
  parameter int unsigned DEPTH  = 64,
  parameter int unsigned BURST  = 32,
  parameter int unsigned FLEN_W = 6
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       wr_valid,
  input  logic [DATA_W-1:0]          wr_data,
  output logic                       wr_ready,
  output logic                       burst_ready,
  input  logic [FLEN_W-1:0]          frame_len,
  input  logic                       rd_ready,
  output logic                       rd_valid,
  output logic [DATA_W-1:0]          rd_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [DATA_W-1:0] mem [DEPTH];
  logic [PW-1:0]     wptr, rptr;
  logic              in_frame, start, push, pop;
  logic [FLEN_W-1:0] remain;

  assign wr_ready    = (count <= CW'(DEPTH - 2));
  assign burst_ready = (count <= CW'(DEPTH - BURST));

  always_comb begin
    start = 1'b0;
    if (frame_len == '0) begin
      rd_valid = (count != '0);
      pop      = rd_valid && rd_ready;
    end else begin
      start    = !in_frame && rd_ready && (count >= CW'(frame_len));
      rd_valid = in_frame || start;
      pop      = rd_valid;
    end
  end
  assign push    = wr_valid && (count != CW'(DEPTH));
  assign rd_data = mem[rptr];

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr     <= '0;
      rptr     <= '0;
      count    <= '0;
      in_frame <= 1'b0;
      remain   <= '0;
    end else begin
      if (push) wptr <= (wptr == PW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == PW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + CW'(push) - CW'(pop);
      if (start) begin
        in_frame <= (frame_len != FLEN_W'(1));
        remain   <= frame_len - 1'b1;
      end else if (in_frame) begin
        remain <= remain - 1'b1;
        if (remain == FLEN_W'(1)) in_frame <= 1'b0;
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (rst) wr_valid |-> count != CW'(DEPTH))
    else $error("fifo_channel: write to a full FIFO");
endmodule
