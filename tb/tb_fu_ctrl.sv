// tb_fu_ctrl: checks the FU controller on its own.
//  - Tag matching: only context words carrying this FU's tag are written, at
//    consecutive IM addresses, with the instruction as write data.
//  - Load phase: DC counts the valid words and ready drops after the first one.
//  - Execution waits for ds_ready and pipe_empty, then issue is high for exactly
//    IC cycles while the registered IM address runs 0 .. IC-1.
//  - ready returns 4 cycles after the last issue (3 drain cycles); only the
//    early ready is high while draining.
//  - With 32 instructions (IC wraps to 0) all 32 are issued.
module tb_fu_ctrl;
  import overlay_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, in_valid, ds_ready, pipe_empty;
  ctx_word_t ctx_in;
  logic im_we, issue, ready, ready_ahead, loaded;
  logic [4:0] im_addr, dc;
  insn_t im_wdata;

  fu_ctrl #(.FU_TAG(8'd5)) dut (.*);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int writes;
  insn_t written [32];
  logic [4:0] waddr [32];
  always @(posedge clk) if (!rst && im_we) begin
    written[writes] = im_wdata; waddr[writes] = im_addr; writes++;
  end

  initial begin
    int issues, first_issue, last_issue, t;
    bit prev_issue = 0;
    insn_t ins [3];
    rst = 1; in_valid = 0; ds_ready = 0; pipe_empty = 1; ctx_in = '0; writes = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    check(ready, "ready after reset");
    for (int i = 0; i < 3; i++) ins[i] = insn_t'($urandom);
    // Interleave foreign tags with our own.
    ctx_in = '{tag: 8'd4, insn: insn_t'($urandom)}; @(negedge clk);
    ctx_in = '{tag: 8'd5, insn: ins[0]};             @(negedge clk);
    ctx_in = '{tag: 8'd6, insn: insn_t'($urandom)}; @(negedge clk);
    ctx_in = '{tag: 8'd5, insn: ins[1]};             @(negedge clk);
    ctx_in = '{tag: 8'd5, insn: ins[2]};             @(negedge clk);
    ctx_in = '0; repeat (3) @(negedge clk);
    check(writes == 3, "three tag-matched writes");
    for (int i = 0; i < 3; i++) begin
      check(written[i] == ins[i], "IM write data");
      check(waddr[i] == 5'(i), "IM write address = IC");
    end
    check(loaded, "loaded flag");

    // Load 4 words.
    for (int i = 0; i < 4; i++) begin
      in_valid = 1; @(negedge clk);
      check(!ready, "ready low while loading");
    end
    in_valid = 0;
    check(dc == 5'd4, "DC counted four words");
    // Downstream not ready: no issue.
    repeat (5) begin @(negedge clk); check(!issue, "no issue while ds_ready low"); end
    ds_ready = 1; pipe_empty = 0;
    repeat (3) begin @(negedge clk); check(!issue, "no issue while results in flight"); end
    pipe_empty = 1;
    issues = 0; first_issue = -1; last_issue = -1;
    for (t = 0; t < 20; t++) begin
      @(negedge clk);
      // The IM address register follows the PC one cycle after each issue.
      if (t > 0 && prev_issue) check(im_addr == 5'(issues - 1), "PC sequence on IM address");
      prev_issue = issue;
      if (issue) begin
        if (first_issue < 0) first_issue = t;
        last_issue = t; issues++;
      end
      if (last_issue >= 0 && t == last_issue + 4) check(ready, "ready 4 cycles after last issue");
      if (last_issue >= 0 && t > last_issue && t < last_issue + 4) check(!ready && ready_ahead, "only early ready while draining");
    end
    check(issues == 3, "issue high for IC cycles");
    check(first_issue == 0, "issue starts one cycle after the start condition");
    check(dc == 0, "DC cleared");

    // Full instruction memory: 32 writes wrap the 5-bit IC to 0, and all 32
    // instructions must still be issued.
    rst = 1; ds_ready = 1; pipe_empty = 1; @(negedge clk); rst = 0; writes = 0;
    for (int i = 0; i < 32; i++) begin
      ctx_in = '{tag: 8'd5, insn: insn_t'($urandom)}; @(negedge clk);
    end
    ctx_in = '0; @(negedge clk);
    check(writes == 32, "32 instructions written");
    check(waddr[7] == 5'd7, "write address 7");
    in_valid = 1; @(negedge clk); in_valid = 0;
    issues = 0;
    for (t = 0; t < 60; t++) begin
      @(negedge clk);
      if (issue) issues++;
    end
    check(issues == 32, "full IM: 32 issues per iteration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
