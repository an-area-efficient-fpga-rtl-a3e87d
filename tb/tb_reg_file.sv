// tb_reg_file: fills the register file through port A, then reads random pairs
// of addresses on ports A and B at once and compares both with a reference copy.
module tb_reg_file;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we;
  logic [4:0] addr_a, addr_b;
  logic [31:0] wdata, rdata_a, rdata_b;
  logic [31:0] ref_mem [32];

  reg_file dut (.clk, .we, .addr_a, .wdata, .addr_b, .rdata_a, .rdata_b);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; addr_a = 0; addr_b = 0; wdata = 0;
    @(negedge clk);
    for (int round = 0; round < 3; round++) begin
      for (int i = 0; i < 32; i++) begin
        ref_mem[i] = $urandom;
        we = 1; addr_a = 5'(i); wdata = ref_mem[i];
        @(negedge clk);
      end
      we = 0;
      for (int n = 0; n < 64; n++) begin
        addr_a = 5'($urandom); addr_b = 5'($urandom);
        #1;
        checks += 2;
        if (rdata_a !== ref_mem[addr_a]) begin failures++; $display("A %0d", addr_a); end
        if (rdata_b !== ref_mem[addr_b]) begin failures++; $display("B %0d", addr_b); end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
