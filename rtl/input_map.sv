// input_map: maps the two 32-bit register-file operands onto the DSP slice's
// A (30-bit) and B (18-bit) ports.
//
// map_mul = 0: operand 1 is extended to 48 bits and split across A:B, the form the
//              DSP's X multiplexer uses for 48-bit add, subtract and logic.
// map_mul = 1: multiplier form, A = operand 1 [24:0] and B = operand 2 [17:0]
//              (the DSP multiplier is 25 x 18, signed).
// map_uns = 1 zero-extends instead of sign-extending (for multiply: 24 x 17 bit
//              unsigned operands, so the signed multiplier gives an unsigned product).
// Operand 2 also feeds the DSP C port directly (outside this block).
// Purely combinational. The paper names this block and its two configuration bits
// only; the mapping is this design's.
module input_map
  import overlay_pkg::*;
(
  input  logic [DATA_W-1:0] op1,
  input  logic [DATA_W-1:0] op2,
  input  logic              map_mul,
  input  logic              map_uns,
  output logic [29:0]       a,
  output logic [17:0]       b
);
  logic [47:0] ext1;

  always_comb begin
    ext1 = map_uns ? {16'b0, op1} : {{16{op1[DATA_W-1]}}, op1};
    if (map_mul) begin
      if (map_uns) begin
        a = {6'b0, op1[23:0]};
        b = {1'b0, op2[16:0]};
      end else begin
        a = {{5{op1[24]}}, op1[24:0]};
        b = op2[17:0];
      end
    end else begin
      a = ext1[47:18];
      b = ext1[17:0];
    end
  end
endmodule
