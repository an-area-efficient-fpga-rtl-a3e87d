// tb_instr_mem: writes all 32 entries of the instruction memory with random
// words, then reads every entry back (asynchronous read) and compares.
module tb_instr_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we;
  logic [4:0] addr;
  logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [32];

  instr_mem dut (.clk, .we, .addr, .wdata, .rdata);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; addr = 0; wdata = 0;
    @(negedge clk);
    for (int i = 0; i < 32; i++) begin
      ref_mem[i] = $urandom;
      we = 1; addr = 5'(i); wdata = ref_mem[i];
      @(negedge clk);
    end
    we = 0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < 32; i++) begin
        addr = 5'((i * 7 + pass) % 32);
        #1;
        checks++;
        if (rdata !== ref_mem[addr]) begin
          failures++;
          $display("IM mismatch at %0d: %h vs %h", addr, rdata, ref_mem[addr]);
        end
        @(negedge clk);
      end
    end
    // Overwrite one entry and check that the neighbours are unaffected.
    we = 1; addr = 5'd3; wdata = ~ref_mem[3]; ref_mem[3] = ~ref_mem[3];
    @(negedge clk); we = 0;
    for (int i = 2; i < 5; i++) begin
      addr = 5'(i); #1; checks++;
      if (rdata !== ref_mem[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
