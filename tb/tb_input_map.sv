// tb_input_map: applies random operands in all four mapping modes and compares
// the A/B outputs with an independently written reference: A:B equals operand 1
// extended to 48 bits, or A and B hold the multiplier operands.
module tb_input_map;
  int checks = 0, failures = 0;
  logic [31:0] op1, op2;
  logic map_mul, map_uns;
  logic [29:0] a;
  logic [17:0] b;

  input_map dut (.op1, .op2, .map_mul, .map_uns, .a, .b);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint signed s1;
    longint unsigned u1;
    for (int n = 0; n < 400; n++) begin
      op1 = $urandom; op2 = $urandom;
      if (n < 8) op1 = (n % 2) ? 32'h8000_0001 : 32'h7fff_ffff;
      map_mul = n[0]; map_uns = n[1];
      #1;
      checks++;
      if (!map_mul) begin
        s1 = longint'($signed(op1));
        u1 = longint'(op1);
        if ({a, b} !== (map_uns ? 48'(u1) : 48'(s1))) begin
          failures++; $display("concat mismatch op1=%h uns=%0d ab=%h", op1, map_uns, {a, b});
        end
      end else if (map_uns) begin
        if (int'(a) != int'(op1 & 32'h00ff_ffff) || int'(b) != int'(op2 & 32'h0001_ffff)) begin
          failures++; $display("umul mismatch");
        end
      end else begin
        // signed: A is op1[24:0] sign-extended, B is op2[17:0]
        if ($signed(a) != $signed(op1[24:0]) || b != op2[17:0]) begin
          failures++; $display("smul mismatch");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
