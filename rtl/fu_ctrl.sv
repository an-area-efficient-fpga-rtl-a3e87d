// fu_ctrl: control of one time-multiplexed functional unit.
//
// Configuration: every cycle the 40-bit context word on the daisy chain is
// compared with this FU's tag. On a match the 32-bit instruction is written into
// the instruction memory at the instruction counter (IC), which then increments.
// The IM write is registered (write enable, data and address), as is the shared
// IM address, which is IC while loading and the program counter (PC) while
// executing. IC is 5 bits, so after 32 writes it wraps to 0; the last instruction
// index is therefore always IC-1 (mod 32).
//
// Execution, per kernel iteration:
//   S_LOAD  : each cycle with in_valid high, a word is written to the register
//             file at the data counter (DC), which increments. The first cycle in
//             which in_valid is low after at least one word ends the load phase.
//   S_EXEC  : entered once the load has ended, the downstream stage is ready and
//             none of this FU's previous results are still in flight. PC runs
//             from 0 to IC-1, one instruction issued per cycle (issue = 1).
//   S_DRAIN : DRAIN cycles until the last operand read has left the register
//             file, then DC is cleared and the FU returns to S_LOAD.
// ready (back-pressure to the input FIFO) is high only in S_LOAD with DC = 0,
// i.e. when the FU is empty and waiting for a new batch. ready_ahead is the same
// signal for an upstream FU: because that FU's results arrive 8 cycles after it
// issues, it may start while this FU still has at most AHEAD = 4 instructions to
// issue or is draining; they land after this FU is back in S_LOAD.
//
// The paper describes the tag match, IC, PC, DC, the control generator and the
// back-pressure to the input FIFO; the downstream-ready and in-flight checks, the
// early ready, the tag-0 empty slot and the drain length are this design's.
module fu_ctrl
  import overlay_pkg::*;
#(
  parameter logic [TAG_W-1:0] FU_TAG = 8'd1,
  parameter int unsigned      DRAIN  = 3,
  parameter int unsigned      AHEAD  = 4
) (
  input  logic              clk,
  input  logic              rst,
  input  ctx_word_t         ctx_in,
  input  logic              in_valid,
  input  logic              ds_ready,
  input  logic              pipe_empty,
  output logic              im_we,
  output logic [ADDR_W-1:0] im_addr,
  output insn_t             im_wdata,
  output logic [ADDR_W-1:0] dc,
  output logic              issue,
  output logic              ready,
  output logic              ready_ahead,
  output logic              loaded
);
  typedef enum logic [1:0] {S_LOAD, S_EXEC, S_DRAIN} state_t;
  state_t state;
  logic [ADDR_W-1:0] ic, pc;
  logic [$clog2(DRAIN+1)-1:0] drain;
  logic match;

  assign match = (ctx_in.tag == FU_TAG) && (ctx_in.tag != '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      ic       <= '0;
      loaded   <= 1'b0;
      im_we    <= 1'b0;
      im_addr  <= '0;
      im_wdata <= '0;
      state    <= S_LOAD;
      dc       <= '0;
      pc       <= '0;
      drain    <= '0;
    end else begin
      // Tag matching and instruction write path.
      im_we    <= match;
      im_wdata <= ctx_in.insn;
      if (match) begin
        ic     <= ic + 1'b1;
        loaded <= 1'b1;
      end
      im_addr  <= (state == S_EXEC) ? pc : ic;

      // Control generator.
      unique case (state)
        S_LOAD: begin
          if (in_valid) begin
            dc <= dc + 1'b1;
          end else if (dc != '0 && loaded && ds_ready && pipe_empty) begin
            state <= S_EXEC;
            pc    <= '0;
          end
        end
        S_EXEC: begin
          if (pc == ic - 1'b1) begin
            state <= S_DRAIN;
            drain <= '0;
          end else begin
            pc <= pc + 1'b1;
          end
        end
        default: begin // S_DRAIN
          if (32'(drain) == DRAIN - 1) begin
            state <= S_LOAD;
            dc    <= '0;
          end else begin
            drain <= drain + 1'b1;
          end
        end
      endcase
    end
  end

  assign issue = (state == S_EXEC);
  assign ready = (state == S_LOAD) && (dc == '0);
  // Early ready for an upstream FU, whose data arrives FU_LATENCY cycles after
  // it issues: this FU will be back in S_LOAD, empty, by then if at most AHEAD
  // instructions remain or it is draining.
  assign ready_ahead = ready || (state == S_DRAIN) ||
                       ((state == S_EXEC) && (32'(ADDR_W'(ic - 1'b1 - pc)) <= AHEAD));

  // Data may only arrive while the FU is loading.
  a_valid_in_load: assert property (@(posedge clk) disable iff (rst) in_valid |-> state == S_LOAD)
    else $error("fu_ctrl %0d: input data while not loading", FU_TAG);
endmodule
