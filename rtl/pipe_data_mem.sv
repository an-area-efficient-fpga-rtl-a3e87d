// pipe_data_mem: the single-port data block RAM of one pipeline, with the
// streaming engine that moves data between it and the pipeline.
//
// While idle, the host (standing in for the DMA of the processor system) reads
// and writes the RAM through host_* (read data one cycle after the address).
// A pulse on start begins a run: words 0 .. n_in-1 are read and pushed to the
// pipeline input (s_valid/s_data, gated by s_ready), and n_out results accepted
// from the pipeline output (r_valid/r_data/r_ready) are written from out_base
// upward. The RAM has one port, so each cycle does one access: a result write
// wins over an input read. done rises when all reads and writes are finished and
// stays high until the next start. The paper gives the single-port BRAM per
// pipeline and DMA transfers; this engine is this design's.
module pipe_data_mem
  import overlay_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       host_en,
  input  logic                       host_we,
  input  logic [$clog2(DEPTH)-1:0]   host_addr,
  input  logic [DATA_W-1:0]          host_wdata,
  output logic [DATA_W-1:0]          host_rdata,
  input  logic                       start,
  input  logic [$clog2(DEPTH+1)-1:0] n_in,
  input  logic [$clog2(DEPTH+1)-1:0] n_out,
  input  logic [$clog2(DEPTH)-1:0]   out_base,
  output logic                       busy,
  output logic                       done,
  output logic                       s_valid,
  output logic [DATA_W-1:0]          s_data,
  input  logic                       s_ready,
  input  logic                       r_valid,
  input  logic [DATA_W-1:0]          r_data,
  output logic                       r_ready
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(DEPTH+1);

  logic [DATA_W-1:0] mem [DEPTH];
  logic [DATA_W-1:0] rdata;
  logic [LW-1:0]     in_cnt, out_cnt;
  logic              rd_pend, do_wr, do_rd;
  logic              en, we;
  logic [AW-1:0]     addr;
  logic [DATA_W-1:0] wdata;

  assign r_ready = busy && (out_cnt < n_out);
  assign do_wr   = r_valid && r_ready;
  assign do_rd   = busy && !do_wr && (in_cnt < n_in) && s_ready;

  always_comb begin
    if (busy) begin
      en    = do_wr || do_rd;
      we    = do_wr;
      addr  = do_wr ? out_base + out_cnt[AW-1:0] : in_cnt[AW-1:0];
      wdata = r_data;
    end else begin
      en    = host_en;
      we    = host_we;
      addr  = host_addr;
      wdata = host_wdata;
    end
  end

  // Single-port RAM, read-first.
  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      rdata <= mem[addr];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      in_cnt  <= '0;
      out_cnt <= '0;
      rd_pend <= 1'b0;
    end else begin
      rd_pend <= do_rd;
      if (start && !busy) begin
        busy    <= 1'b1;
        done    <= 1'b0;
        in_cnt  <= '0;
        out_cnt <= '0;
      end else if (busy) begin
        if (do_rd) in_cnt  <= in_cnt + 1'b1;
        if (do_wr) out_cnt <= out_cnt + 1'b1;
        if (in_cnt == n_in && out_cnt == n_out && !rd_pend) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign s_valid    = rd_pend;
  assign s_data     = rdata;
  assign host_rdata = rdata;
endmodule
