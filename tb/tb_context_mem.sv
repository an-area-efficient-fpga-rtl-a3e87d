// tb_context_mem: writes 82 random context words with non-zero tags (82 words
// of 40 bits = 410 bytes, the largest kernel context of the benchmark set), loads
// words 0..n-1 for two lengths and checks that ctx_out shows them in order, one
// per cycle starting 2 cycles after start, with tag 0 before and after, and that
// busy covers the load.
module tb_context_mem;
  import overlay_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, host_we, start, busy;
  logic [8:0] host_addr;
  logic [9:0] len;
  ctx_word_t host_wdata, ctx_out;
  ctx_word_t ref_mem [82];

  context_mem dut (.*);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; host_we = 0; host_addr = 0; host_wdata = '0; start = 0; len = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 82; i++) begin
      ref_mem[i] = {8'(1 + $urandom % 255), 32'($urandom)};
      host_we = 1; host_addr = 9'(i); host_wdata = ref_mem[i]; @(negedge clk);
    end
    host_we = 0;
    for (int r = 0; r < 2; r++) begin
      int n;
      n = (r == 0) ? 82 : 7;
      check(ctx_out.tag == 0, "idle chain carries tag 0");
      start = 1; len = 10'(n); @(negedge clk); start = 0;
      check(busy, "busy during load");
      @(negedge clk);
      for (int i = 0; i < n; i++) begin
        check(ctx_out == ref_mem[i], $sformatf("word %0d in order", i));
        @(negedge clk);
      end
      check(ctx_out.tag == 0, "tag 0 after the last word");
      check(!busy, "busy cleared");
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
