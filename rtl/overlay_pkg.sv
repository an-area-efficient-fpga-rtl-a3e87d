// overlay_pkg: widths and word formats shared by the time-multiplexed overlay.
//
// Context word (40 bits) = {tag[7:0], instruction[31:0]}. It is shifted down the
// FU daisy chain; an FU whose tag matches stores the instruction. Tag 0 marks an
// empty slot on the chain, so FU tags start at 1.
//
// Instruction (32 bits) = {spare, cfg[20:0], src_a[4:0], src_b[4:0]}. There is no
// decoder: cfg drives the input mapping and the DSP slice control pins directly.
// The 21-bit cfg split (1+1 for the input mapping, 1+1+4+7+5 for the DSP and a
// 1-bit INMODE mux select) follows the widths printed in the paper's FU diagram;
// the meaning given to each single bit and the bit order are this design's.
package overlay_pkg;

  localparam int unsigned DATA_W = 32;   // datapath width
  localparam int unsigned TAG_W  = 8;    // FU tag
  localparam int unsigned INSN_W = 32;   // instruction
  localparam int unsigned CTX_W  = TAG_W + INSN_W; // 40-bit context word
  localparam int unsigned ADDR_W = 5;    // IM / RF address (32 entries)
  localparam int unsigned CFG_W  = 21;   // configuration part of an instruction
  localparam int unsigned IM_DEPTH = 32;
  localparam int unsigned RF_DEPTH = 32;
  localparam int unsigned FU_LATENCY = 8; // issue -> data out of the FU, cycles

  // DSP control fields, 19 bits: 18 held in the ALU configuration register plus
  // the INMODE mux select.
  typedef struct packed {
    logic       inmode_zero; // 1: feed INMODE = 0 instead of the stored value
    logic [4:0] inmode;      // DSP48E1 INMODE (bits 0, 1, 4 used)
    logic [6:0] opmode;      // DSP48E1 OPMODE {Z[2:0], Y[1:0], X[1:0]}
    logic [3:0] alumode;     // DSP48E1 ALUMODE
    logic       rsvd;        // printed 1-bit field, no function assigned
    logic       carryin;     // carry into the post-adder
  } dsp_cfg_t;

  typedef struct packed {
    dsp_cfg_t dsp;           // 19 bits
    logic     map_uns;       // input map: zero- instead of sign-extension
    logic     map_mul;       // input map: multiplier operands instead of A:B
  } fu_cfg_t;                // 21 bits

  typedef struct packed {
    logic              spare;
    fu_cfg_t           cfg;
    logic [ADDR_W-1:0] src_a;
    logic [ADDR_W-1:0] src_b;
  } insn_t;                  // 32 bits

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    insn_t            insn;
  } ctx_word_t;              // 40 bits

  // OPMODE multiplexer codes used by this design (DSP48E1 encoding).
  localparam logic [1:0] X_ZERO = 2'b00, X_M = 2'b01, X_P = 2'b10, X_AB = 2'b11;
  localparam logic [1:0] Y_ZERO = 2'b00, Y_M = 2'b01, Y_ONES = 2'b10, Y_C = 2'b11;
  localparam logic [2:0] Z_ZERO = 3'b000, Z_P = 3'b010, Z_C = 3'b011;

  // ALUMODE codes (DSP48E1 encoding).
  localparam logic [3:0] ALU_ADD   = 4'b0000; // Z + X + Y + CIN
  localparam logic [3:0] ALU_NSUB  = 4'b0001; // -Z + (X + Y + CIN) - 1
  localparam logic [3:0] ALU_NOT   = 4'b0010; // -(Z + X + Y + CIN) - 1
  localparam logic [3:0] ALU_SUB   = 4'b0011; // Z - (X + Y + CIN)
  localparam logic [3:0] ALU_XOR   = 4'b0100;
  localparam logic [3:0] ALU_XNOR  = 4'b0101;
  localparam logic [3:0] ALU_AND   = 4'b1100;
  localparam logic [3:0] ALU_ANDN  = 4'b1101; // X AND NOT Z
  localparam logic [3:0] ALU_NAND  = 4'b1110;
  localparam logic [3:0] ALU_ORN   = 4'b1111; // NOT X OR Z

  // Helper: build an instruction word.
  function automatic insn_t make_insn(input logic map_mul, input logic map_uns,
                                      input logic [6:0] opmode, input logic [3:0] alumode,
                                      input logic carryin,
                                      input logic [ADDR_W-1:0] src_a,
                                      input logic [ADDR_W-1:0] src_b);
    insn_t i;
    i = '0;
    i.cfg.map_mul     = map_mul;
    i.cfg.map_uns     = map_uns;
    i.cfg.dsp.opmode  = opmode;
    i.cfg.dsp.alumode = alumode;
    i.cfg.dsp.carryin = carryin;
    i.src_a = src_a;
    i.src_b = src_b;
    return i;
  endfunction

  // Common instructions. Operand order: op1 = RF[src_a], op2 = RF[src_b] (= C).
  // ADD: op1 + op2.  SUB: op1 - op2 = -C + A:B + 1 - 1 with carry in.
  // MUL: low 32 bits of op1[24:0] * op2[17:0].  BYP: pass op2 (src_b).
  function automatic insn_t insn_add(input logic [ADDR_W-1:0] a, input logic [ADDR_W-1:0] b);
    return make_insn(1'b0, 1'b0, {Z_C, Y_ZERO, X_AB}, ALU_ADD, 1'b0, a, b);
  endfunction
  function automatic insn_t insn_sub(input logic [ADDR_W-1:0] a, input logic [ADDR_W-1:0] b);
    return make_insn(1'b0, 1'b0, {Z_C, Y_ZERO, X_AB}, ALU_NSUB, 1'b1, a, b);
  endfunction
  function automatic insn_t insn_mul(input logic [ADDR_W-1:0] a, input logic [ADDR_W-1:0] b);
    return make_insn(1'b1, 1'b0, {Z_ZERO, Y_M, X_M}, ALU_ADD, 1'b0, a, b);
  endfunction
  function automatic insn_t insn_byp(input logic [ADDR_W-1:0] b);
    return make_insn(1'b0, 1'b0, {Z_C, Y_ZERO, X_ZERO}, ALU_ADD, 1'b0, '0, b);
  endfunction

endpackage
