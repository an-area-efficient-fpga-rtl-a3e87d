// tb_fu_alu: streams one random operation per cycle into the ALU (add, the two
// subtract forms, multiply, bypass of C, NOT, XOR, AND, NAND) and checks that
// each result appears exactly 4 cycles later and equals a reference computed
// here from the operands.
module tb_fu_alu;
  import overlay_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [29:0] a;
  logic [17:0] b;
  logic [31:0] c, p;
  dsp_cfg_t cfg;
  logic [31:0] expq [$];
  logic        vq   [$];

  fu_alu dut (.clk, .a, .b, .c, .cfg, .p);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] model(int op, logic [31:0] x1, logic [31:0] x2);
    longint s1, s2;
    s1 = longint'($signed(x1)); s2 = longint'($signed(x2));
    case (op)
      0: return x1 + x2;
      1: return x1 - x2;
      2: return x2 - x1;
      3: return 32'(longint'($signed(x1[24:0])) * longint'($signed(x2[17:0])));
      4: return x2;
      5: return ~(x1 + x2);
      6: return x1 ^ x2;
      7: return x1 & x2;
      default: return ~(x1 & x2);
    endcase
  endfunction

  task automatic drive(int op, logic [31:0] x1, logic [31:0] x2);
    logic [47:0] e1;
    e1 = {{16{x1[31]}}, x1};
    cfg = '0;
    c = x2;
    if (op == 3) begin
      a = {{5{x1[24]}}, x1[24:0]}; b = x2[17:0];
    end else begin
      a = e1[47:18]; b = e1[17:0];
    end
    case (op)
      0: begin cfg.opmode = {Z_C, Y_ZERO, X_AB}; cfg.alumode = ALU_ADD; end
      1: begin cfg.opmode = {Z_C, Y_ZERO, X_AB}; cfg.alumode = ALU_NSUB; cfg.carryin = 1; end
      2: begin cfg.opmode = {Z_C, Y_ZERO, X_AB}; cfg.alumode = ALU_SUB; end
      3: begin cfg.opmode = {Z_ZERO, Y_M, X_M}; cfg.alumode = ALU_ADD; end
      4: begin cfg.opmode = {Z_C, Y_ZERO, X_ZERO}; cfg.alumode = ALU_ADD; end
      5: begin cfg.opmode = {Z_C, Y_ZERO, X_AB}; cfg.alumode = ALU_NOT; end
      6: begin cfg.opmode = {Z_C, Y_ZERO, X_AB}; cfg.alumode = ALU_XOR; end
      7: begin cfg.opmode = {Z_C, Y_ZERO, X_AB}; cfg.alumode = ALU_AND; end
      default: begin cfg.opmode = {Z_C, Y_ZERO, X_AB}; cfg.alumode = ALU_NAND; end
    endcase
    // A non-zero INMODE that is forced to zero by the mux select must not matter.
    if (op == 0) begin cfg.inmode = 5'b10011; cfg.inmode_zero = 1'b1; end
  endtask

  initial begin
    logic [31:0] x1, x2;
    int op;
    a = '0; b = '0; c = '0; cfg = '0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      op = n % 9;
      x1 = $urandom; x2 = $urandom;
      drive(op, x1, x2);
      expq.push_back(model(op, x1, x2));
      vq.push_back(1'b1);
      // The result for the operation driven now must be on p 4 cycles later.
      if (expq.size() == 5) begin
        logic [31:0] e;
        e = expq.pop_front();
        checks++;
        if (p !== e) begin
          failures++;
          $display("ALU mismatch n=%0d got %h exp %h", n, p, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
