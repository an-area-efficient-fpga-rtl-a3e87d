// fu_alu: the FU's programmable ALU, built around a DSP48E1-style slice.
//
// Contents (following the paper's FU diagram): a 32-bit register at the C input
// for pipeline balancing, the configuration register (18 bits plus the INMODE mux
// select), the slice itself and a 32-bit output register. The slice is a
// behavioural-but-synthesizable description of the DSP48E1 subset the overlay
// uses: two input register stages on A and B (INMODE[0]/[4] pick stage 1 or 2),
// a C register, a 25 x 18 signed multiplier with its M register bypassed,
// X/Y/Z multiplexers (X: 0, M, P, A:B; Y: 0, all ones, C; Z: 0, P, C), the
// ALUMODE add/subtract functions and the two-input logic functions (as for
// OPMODE[3:2] = 00), and the P register. When X selects M the Y input is taken as
// zero, i.e. the two partial products are modelled as one full product.
//
// Timing: a, b, c and cfg presented in cycle t produce p in cycle t+4
// (A1/B1 and C-balance, A2/B2/CREG and internal control registers, P, output).
// The result is the low 32 bits of the 48-bit P.
module fu_alu
  import overlay_pkg::*;
(
  input  logic              clk,
  input  logic [29:0]       a,
  input  logic [17:0]       b,
  input  logic [DATA_W-1:0] c,
  input  dsp_cfg_t          cfg,
  output logic [DATA_W-1:0] p
);
  logic [29:0] a1, a2;
  logic [17:0] b1, b2;
  logic [DATA_W-1:0] c_bal;
  logic [47:0] creg, preg;
  dsp_cfg_t cfg_q, cfg_int;

  // Register stages.
  always_ff @(posedge clk) begin
    a1      <= a;
    b1      <= b;
    c_bal   <= c;
    cfg_q   <= cfg;       // ALU configuration register
    a2      <= a1;
    b2      <= b1;
    creg    <= {{16{c_bal[DATA_W-1]}}, c_bal};
    cfg_int <= cfg_q;     // DSP internal OPMODE/ALUMODE/INMODE/CARRYIN registers
  end

  // Combinational DSP core.
  logic [4:0]  inm;
  logic [29:0] a_sel;
  logic [17:0] b_sel;
  logic signed [24:0] m_a;
  logic signed [17:0] m_b;
  logic signed [47:0] m;
  logic [47:0] x, y, z, sum, res;

  always_comb begin
    inm   = cfg_int.inmode_zero ? 5'b0 : cfg_int.inmode;
    a_sel = inm[0] ? a1 : a2;
    b_sel = inm[4] ? b1 : b2;
    m_a   = inm[1] ? 25'sd0 : $signed(a_sel[24:0]);
    m_b   = $signed(b_sel);
    m     = 48'(m_a * m_b);

    unique case (cfg_int.opmode[1:0])
      X_ZERO:  x = '0;
      X_M:     x = m;
      X_P:     x = preg;
      default: x = {a_sel, b_sel};
    endcase
    unique case (cfg_int.opmode[3:2])
      Y_C:     y = creg;
      Y_ONES:  y = '1;
      default: y = '0;   // Y_ZERO, or Y_M (product already in X)
    endcase
    unique case (cfg_int.opmode[6:4])
      Z_P:     z = preg;
      Z_C:     z = creg;
      default: z = '0;
    endcase

    sum = x + y + 48'(cfg_int.carryin);
    unique case (cfg_int.alumode)
      ALU_ADD:  res = z + sum;
      ALU_NSUB: res = sum - z - 48'd1;
      ALU_NOT:  res = ~(z + sum);
      ALU_SUB:  res = z - sum;
      ALU_XOR, 4'b0111:  res = x ^ z;
      ALU_XNOR, 4'b0110: res = ~(x ^ z);
      ALU_AND:  res = x & z;
      ALU_ANDN: res = x & ~z;
      ALU_NAND: res = ~(x & z);
      ALU_ORN:  res = ~x | z;
      default:  res = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    preg <= res;
    p    <= preg[DATA_W-1:0];
  end
endmodule
