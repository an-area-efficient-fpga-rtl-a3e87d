// overlay_top: the time-multiplexed overlay as a memory-mapped accelerator.
//
// NUM_PIPES replicated pipelines of NUM_FU FUs each, one shared context memory
// whose loader drives a single context daisy chain through all FUs of all
// pipelines (FU k of pipeline p has tag p*NUM_FU + k + 1), and one single-port
// data memory with a streaming engine per pipeline. Replicating pipelines hides
// the initiation interval of one pipeline; for graphs deeper than NUM_FU stages,
// cascade = 1 chains pipeline 2j into pipeline 2j+1: the first takes its input
// from its data memory, the second writes the results to its own data memory.
//
// Host side (the processor/DMA of the system is outside): ctx_* load context
// words and start a context load; mem_* give per-pipeline access to the data
// memories while no run is active; run_start begins a run on every pipeline with
// run_n_in input words, run_n_out result words and results written from
// run_out_base; run_done[p] rises when pipeline p's engine has finished.
// frame_len[p] is the number of input words per kernel iteration of pipeline p.
// A context switch is a reset followed by a new context load.
// The paper gives replicated pipelines, the cascading of two pipelines for deep
// graphs, one context BRAM for all pipelines and one single-port data BRAM per
// pipeline; the number of pipelines (2), the memory depths, the global tag
// numbering and the host-side ports are this design's.
module overlay_top
  import overlay_pkg::*;
#(
  parameter int unsigned NUM_PIPES = 2,
  parameter int unsigned NUM_FU    = 8,
  parameter int unsigned CTX_DEPTH = 512,
  parameter int unsigned MEM_DEPTH = 1024
) (
  input  logic                           clk,
  input  logic                           rst,
  // context memory
  input  logic                           ctx_we,
  input  logic [$clog2(CTX_DEPTH)-1:0]   ctx_addr,
  input  ctx_word_t                      ctx_wdata,
  input  logic                           ctx_start,
  input  logic [$clog2(CTX_DEPTH+1)-1:0] ctx_len,
  output logic                           ctx_busy,
  // mode and per-pipeline iteration size
  input  logic                           cascade,
  input  logic [5:0]                     frame_len   [NUM_PIPES],
  // data memories
  input  logic                           mem_en      [NUM_PIPES],
  input  logic                           mem_we      [NUM_PIPES],
  input  logic [$clog2(MEM_DEPTH)-1:0]   mem_addr    [NUM_PIPES],
  input  logic [DATA_W-1:0]              mem_wdata   [NUM_PIPES],
  output logic [DATA_W-1:0]              mem_rdata   [NUM_PIPES],
  // run control
  input  logic                           run_start,
  input  logic [$clog2(MEM_DEPTH+1)-1:0] run_n_in,
  input  logic [$clog2(MEM_DEPTH+1)-1:0] run_n_out,
  input  logic [$clog2(MEM_DEPTH)-1:0]   run_out_base,
  output logic                           run_done    [NUM_PIPES]
);
  localparam int unsigned LW = $clog2(MEM_DEPTH+1);

  ctx_word_t chain [NUM_PIPES+1];

  context_mem #(.DEPTH(CTX_DEPTH)) u_ctx (
    .clk, .rst, .host_we(ctx_we), .host_addr(ctx_addr), .host_wdata(ctx_wdata),
    .start(ctx_start), .len(ctx_len), .busy(ctx_busy), .ctx_out(chain[0])
  );

  // Per-pipeline streams.
  logic              m_valid [NUM_PIPES], m_ready [NUM_PIPES];   // memory -> pipeline
  logic [DATA_W-1:0] m_data  [NUM_PIPES];
  logic              p_valid [NUM_PIPES], p_ready [NUM_PIPES];   // pipeline -> memory
  logic [DATA_W-1:0] p_data  [NUM_PIPES];
  logic              i_valid [NUM_PIPES], i_ready [NUM_PIPES];   // pipeline input
  logic [DATA_W-1:0] i_data  [NUM_PIPES];
  logic              o_valid [NUM_PIPES], o_ready [NUM_PIPES];   // pipeline output
  logic [DATA_W-1:0] o_data  [NUM_PIPES];

  for (genvar p = 0; p < NUM_PIPES; p++) begin : g_pipe
    // Cascade roles: even pipeline p with a partner p+1 is the head, odd is the tail.
    localparam bit HAS_NEXT = (p % 2 == 0) && (p + 1 < NUM_PIPES);
    localparam bit IS_TAIL  = (p % 2 == 1);
    logic head_c, tail_c;
    assign head_c = cascade && HAS_NEXT;
    assign tail_c = cascade && IS_TAIL;

    overlay_pipeline #(.NUM_FU(NUM_FU), .TAG_BASE(TAG_W'(p * NUM_FU + 1))) u_pipe (
      .clk, .rst, .ctx_in(chain[p]), .ctx_out(chain[p+1]), .frame_len(frame_len[p]),
      .in_valid(i_valid[p]), .in_data(i_data[p]), .in_ready(i_ready[p]),
      .out_valid(o_valid[p]), .out_data(o_data[p]), .out_ready(o_ready[p])
    );

    pipe_data_mem #(.DEPTH(MEM_DEPTH)) u_mem (
      .clk, .rst,
      .host_en(mem_en[p]), .host_we(mem_we[p]), .host_addr(mem_addr[p]),
      .host_wdata(mem_wdata[p]), .host_rdata(mem_rdata[p]),
      .start(run_start),
      .n_in(tail_c ? LW'(0) : run_n_in), .n_out(head_c ? LW'(0) : run_n_out),
      .out_base(run_out_base), .busy(), .done(run_done[p]),
      .s_valid(m_valid[p]), .s_data(m_data[p]), .s_ready(m_ready[p]),
      .r_valid(p_valid[p]), .r_data(p_data[p]), .r_ready(p_ready[p])
    );

    // Pipeline input: own memory, or the previous pipeline's output in cascade.
    if (IS_TAIL) begin : g_tail
      assign i_valid[p] = tail_c ? o_valid[p-1] : m_valid[p];
      assign i_data[p]  = tail_c ? o_data[p-1]  : m_data[p];
    end else begin : g_head
      assign i_valid[p] = m_valid[p];
      assign i_data[p]  = m_data[p];
    end
    assign m_ready[p] = i_ready[p];

    // Pipeline output: own memory, or the next pipeline's input in cascade.
    if (HAS_NEXT) begin : g_next
      assign o_ready[p] = head_c ? i_ready[p+1] : p_ready[p];
    end else begin : g_last
      assign o_ready[p] = p_ready[p];
    end
    assign p_valid[p] = o_valid[p] && !head_c;
    assign p_data[p]  = o_data[p];
  end
endmodule
