// tb_pipe_data_mem: the data memory and its streaming engine. The host writes
// 50 input words; a run streams them out through s_valid (with random s_ready
// back-pressure); the test bench returns each word plus 1000 as a "result" after
// a random delay; the engine writes the 50 results from out_base = 100. The host
// then reads both regions back and checks them, and that done is set.
module tb_pipe_data_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, host_en, host_we, start, busy, done;
  logic [9:0] host_addr, out_base;
  logic [31:0] host_wdata, host_rdata, s_data, r_data;
  logic [10:0] n_in, n_out;
  logic s_valid, s_ready, r_valid, r_ready;

  pipe_data_mem dut (.*);

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

  localparam int N = 50;
  logic [31:0] src [N];
  logic [31:0] loop_q [$];
  int streamed = 0;

  // Loop-back "pipeline": returns data + 1000.
  always @(posedge clk) begin
    if (!rst && s_valid) begin
      check(s_data == src[streamed], "input words streamed in order");
      loop_q.push_back(s_data + 1000); streamed++;
    end
    if (!rst && r_valid && r_ready) void'(loop_q.pop_front());
  end
  always @(negedge clk) begin
    s_ready <= ($urandom % 4) != 0;
    r_valid <= (loop_q.size() > 0) && ($urandom % 2 == 0);
    r_data  <= (loop_q.size() > 0) ? loop_q[0] : 32'h0;
  end

  initial begin
    rst = 1; host_en = 0; host_we = 0; host_addr = 0; host_wdata = 0; start = 0;
    n_in = 0; n_out = 0; out_base = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < N; i++) begin
      src[i] = $urandom;
      host_en = 1; host_we = 1; host_addr = 10'(i); host_wdata = src[i]; @(negedge clk);
    end
    host_en = 0; host_we = 0;
    n_in = N; n_out = N; out_base = 10'd100;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(streamed == N, "all inputs streamed");
    for (int i = 0; i < N; i++) begin
      host_en = 1; host_addr = 10'(100 + i); @(negedge clk);
      #1 check(host_rdata == src[i] + 1000, $sformatf("result %0d written: %h", i, host_rdata));
      host_addr = 10'(i); @(negedge clk);
      #1 check(host_rdata == src[i], "input region kept");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
