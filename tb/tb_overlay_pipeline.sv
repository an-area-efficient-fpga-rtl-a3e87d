// tb_overlay_pipeline: one 8-FU pipeline running the 'gradient' kernel.
// The context is shifted in over the daisy chain, then ITERS iterations of 5
// input words are pushed into the input FIFO (frame_len = 5) as fast as it
// accepts them, while the consumer's out_ready is random. Checked: every
// result against the reference model, the number of results, that the input
// FIFO was held back by FU 0 and that the pass-through FUs executed bypass
// instructions. The steady-state initiation interval (cycles between results
// leaving FU 7) is measured and must be the 14 cycles this RTL is built for:
// stage 1 (4 loads, 4 multiplies) is the bottleneck.
module tb_overlay_pipeline;
  import overlay_pkg::*;
  import kernels_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;
  logic [5:0] frame_len;
  ctx_word_t ctx_in, ctx_out;

  overlay_pipeline dut (.*);

  localparam int ITERS = 24;
  logic [31:0] expq [$];

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, results = 0, bp = 0, byp = 0, last_t = -1, ii = -1;
  int ii_hist [$];
  always @(posedge clk) begin
    cyc++;
    if (!rst) begin
      if (dut.u_in_fifo.count >= 5 && !dut.fu_ready[0]) bp++;
      if (dut.g_fu[5].u_fu.issue) byp++;
      // Start of each result burst at the last FU.
      if (dut.v[8] && !$past(dut.v[8])) begin
        if (last_t >= 0) ii_hist.push_back(cyc - last_t);
        last_t = cyc;
      end
      if (out_valid && out_ready) begin
        logic [31:0] e;
        e = expq.pop_front();
        check(out_data == e, $sformatf("result %0d: %h vs %h", results, out_data, e));
        results++;
      end
    end
  end
  always @(negedge clk) out_ready <= ($urandom % 3) != 0;

  initial begin
    ctx_q_t prog;
    logic [31:0] w [5];
    rst = 1; in_valid = 0; in_data = 0; frame_len = 6'd5; ctx_in = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    prog = gradient_ctx(1, 8);
    foreach (prog[i]) begin ctx_in = prog[i]; @(negedge clk); end
    ctx_in = '0;
    repeat (10) @(negedge clk);
    for (int it = 0; it < ITERS; it++) begin
      for (int i = 0; i < 5; i++) w[i] = $urandom % 65536;
      expq.push_back(gradient_ref(w[0], w[1], w[2], w[3], w[4]));
      for (int i = 0; i < 5; i++) begin
        in_valid = 0;
        #1; while (!in_ready) begin @(negedge clk); #1; end
        in_valid = 1; in_data = w[i];
        @(negedge clk);
      end
      in_valid = 0;
    end
    while (results < ITERS && cyc < 100000) @(negedge clk);
    check(results == ITERS, "all results");
    check(bp > 0, "FU0 back-pressure held the input FIFO");
    check(byp == ITERS, "bypass FU issued once per iteration");
    // Steady state: skip the first intervals.
    ii = ii_hist[ii_hist.size() / 2];
    $display("measured II=%0d (bp=%0d)", ii, bp);
    check(ii == 14, "steady-state initiation interval");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
