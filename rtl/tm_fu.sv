// tm_fu: one time-multiplexed functional unit (FU) of the overlay pipeline.
//
// An FU executes all operations of one schedule stage of a data-flow graph. It
// stores up to 32 instructions (IM) and up to 32 data words (RF). A kernel
// iteration is: load the stage's inputs into the RF (one word per cycle while
// in_valid is high), then issue the stored instructions one per cycle, each
// reading two RF words and producing one result word for the next stage, then
// drain and wait for the next batch. There is no instruction decoder: the
// 21-bit configuration field drives the input mapping and DSP control pins.
//
// Interfaces:
//   ctx_in/ctx_out : 40-bit context daisy chain, one register per FU.
//   in_valid/in_data, ready   : data stream from the previous stage; ready is the
//                               back-pressure (high when empty and loading), for
//                               an input FIFO; ready_ahead is the early form for
//                               an upstream FU (see fu_ctrl).
//   out_valid/out_data, ds_ready : results to the next stage; ds_ready is the
//                               next stage's ready_ahead (or FIFO room), checked
//                               before execution.
// Timing: an instruction issued in cycle c reaches out_data in cycle c+8
// (IM address, IM data, operand address, RF data, then 4 cycles in the ALU).
// A stage with L inputs and N instructions occupies the FU for L + N + 4 cycles
// plus the wait for its downstream stage. Register placement follows the
// paper's FU diagram; the exact latency is this design's.
module tm_fu
  import overlay_pkg::*;
#(
  parameter logic [TAG_W-1:0] FU_TAG = 8'd1
) (
  input  logic              clk,
  input  logic              rst,
  input  ctx_word_t         ctx_in,
  output ctx_word_t         ctx_out,
  input  logic              in_valid,
  input  logic [DATA_W-1:0] in_data,
  output logic              ready,
  output logic              ready_ahead,
  input  logic              ds_ready,
  output logic              out_valid,
  output logic [DATA_W-1:0] out_data
);
  // Context daisy chain register.
  always_ff @(posedge clk) begin
    if (rst) ctx_out <= '0;
    else     ctx_out <= ctx_in;
  end

  // Control.
  logic              im_we, issue, loaded, pipe_empty;
  logic [ADDR_W-1:0] im_addr, dc;
  insn_t             im_wdata, im_rdata;
  logic [FU_LATENCY:1] iss;   // issue delayed by 1..FU_LATENCY cycles

  fu_ctrl #(.FU_TAG(FU_TAG)) u_ctrl (
    .clk, .rst, .ctx_in, .in_valid, .ds_ready, .pipe_empty,
    .im_we, .im_addr, .im_wdata, .dc, .issue, .ready, .ready_ahead, .loaded
  );

  always_ff @(posedge clk) begin
    if (rst) iss <= '0;
    else     iss <= {iss[FU_LATENCY-1:1], issue};
  end
  assign pipe_empty = (iss == '0);

  // Instruction memory and its output register.
  insn_t ir_q;
  instr_mem #(.DEPTH(IM_DEPTH), .WIDTH(INSN_W)) u_im (
    .clk, .we(im_we), .addr(im_addr), .wdata(im_wdata), .rdata(im_rdata)
  );
  always_ff @(posedge clk) ir_q <= im_rdata;

  // Operand address / configuration registers and RF write registers.
  logic [ADDR_W-1:0] ra_q, rb_q;
  fu_cfg_t           cfg1_q, cfg2_q;
  logic              wv_q;
  logic [DATA_W-1:0] wd_q;
  always_ff @(posedge clk) begin
    ra_q   <= iss[2] ? ir_q.src_a : dc;   // port A address: operand or DC
    rb_q   <= ir_q.src_b;
    cfg1_q <= ir_q.cfg;
    cfg2_q <= cfg1_q;
    wd_q   <= in_data;
  end
  always_ff @(posedge clk) begin
    if (rst) wv_q <= 1'b0;
    else     wv_q <= in_valid;
  end

  // Register file and its output registers.
  logic [DATA_W-1:0] rd_a, rd_b, opa_q, opb_q;
  reg_file #(.DEPTH(RF_DEPTH), .WIDTH(DATA_W)) u_rf (
    .clk, .we(wv_q), .addr_a(ra_q), .wdata(wd_q), .addr_b(rb_q),
    .rdata_a(rd_a), .rdata_b(rd_b)
  );
  always_ff @(posedge clk) begin
    opa_q <= rd_a;
    opb_q <= rd_b;
  end

  // Input mapping and ALU.
  logic [29:0] dsp_a;
  logic [17:0] dsp_b;
  input_map u_map (
    .op1(opa_q), .op2(opb_q), .map_mul(cfg2_q.map_mul), .map_uns(cfg2_q.map_uns),
    .a(dsp_a), .b(dsp_b)
  );
  fu_alu u_alu (
    .clk, .a(dsp_a), .b(dsp_b), .c(opb_q), .cfg(cfg2_q.dsp), .p(out_data)
  );

  assign out_valid = iss[FU_LATENCY];

  // The RF port A is never written and read for an operand in the same cycle.
  a_port_a_shared: assert property (@(posedge clk) disable iff (rst) !(in_valid && iss[2]))
    else $error("tm_fu %0d: RF port A conflict", FU_TAG);
endmodule
