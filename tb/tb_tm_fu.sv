// tb_tm_fu: one functional unit end to end.
// The FU is configured over the context chain with six instructions (the four
// subtractions of the 'gradient' kernel's first stage, a multiply and a bypass),
// with context words for other tags mixed in. Six iterations of five input words
// are streamed in whenever the FU is ready, while ds_ready is toggled randomly.
// Checked: every result against a reference, bursts of six consecutive results,
// 8 cycles from the first issue to the first result, ready low from the first
// input word until the FU has drained, and context words forwarded unchanged
// one cycle later.
module tb_tm_fu;
  import overlay_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, in_valid, ready, ready_ahead, ds_ready, out_valid;
  logic [31:0] in_data, out_data;
  ctx_word_t ctx_in, ctx_out;

  tm_fu #(.FU_TAG(8'd3)) dut (.*);

  localparam int NI = 6, NW = 5, ITERS = 6;
  insn_t prog [NI];
  logic [31:0] expq [$];

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

  // Output monitor: burst shape and values.
  int outs = 0, burst = 0, issue_t = -1, cyc = 0, ds_stalls = 0;
  always @(posedge clk) begin
    cyc++;
    if (!rst && dut.issue && issue_t < 0) issue_t = cyc;
    if (!rst && out_valid) begin
      logic [31:0] e;
      if (outs == 0) check(cyc - issue_t == FU_LATENCY, "issue-to-output latency 8");
      e = expq.pop_front();
      check(out_data == e, $sformatf("result %0d: got %h exp %h", outs, out_data, e));
      outs++; burst++;
    end else if (burst != 0) begin
      check(burst == NI, "results leave as one burst of NI words");
      burst = 0;
    end
    if (!rst && !ds_ready && !dut.issue && dut.u_ctrl.state == 2'd0 && dut.u_ctrl.dc != 0 && !in_valid)
      ds_stalls++;
  end

  // Context chain passes through one register.
  ctx_word_t ctx_prev;
  always @(posedge clk) begin
    if (!rst && $past(!rst)) check(ctx_out == ctx_prev, "context chain forwarding");
    ctx_prev <= ctx_in;
  end

  always @(negedge clk) ds_ready <= (cyc % 16) >= 6;

  initial begin
    logic [31:0] w [NW];
    rst = 1; in_valid = 0; in_data = 0; ctx_in = '0;
    prog[0] = insn_sub(5'd0, 5'd2);
    prog[1] = insn_sub(5'd1, 5'd2);
    prog[2] = insn_sub(5'd2, 5'd3);
    prog[3] = insn_sub(5'd2, 5'd4);
    prog[4] = insn_mul(5'd1, 5'd3);
    prog[5] = insn_byp(5'd4);
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < NI; i++) begin
      ctx_in = '{tag: 8'd3, insn: prog[i]}; @(negedge clk);
      ctx_in = '{tag: 8'd7, insn: insn_t'($urandom)}; @(negedge clk);
    end
    ctx_in = '0;
    for (int it = 0; it < ITERS; it++) begin
      for (int i = 0; i < NW; i++) w[i] = $urandom % 200000;
      expq.push_back(w[0] - w[2]);
      expq.push_back(w[1] - w[2]);
      expq.push_back(w[2] - w[3]);
      expq.push_back(w[2] - w[4]);
      expq.push_back(32'(longint'($signed(w[1][24:0])) * longint'($signed(w[3][17:0]))));
      expq.push_back(w[4]);
      while (!ready) @(negedge clk);
      for (int i = 0; i < NW; i++) begin
        in_valid = 1; in_data = w[i]; @(negedge clk);
        check(!ready, "back-pressure while a batch is held");
      end
      in_valid = 0;
      @(negedge clk);
    end
    repeat (200) @(negedge clk);
    check(outs == NI * ITERS, "all results delivered");
    check(ds_stalls > 0, "execution waited for downstream at least once");
    $display("ds stalls=%0d", ds_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
