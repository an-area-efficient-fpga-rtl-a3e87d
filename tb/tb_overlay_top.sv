// tb_overlay_top: the whole overlay at its default size (2 pipelines of 8 FUs),
// driven as a host would.
//  Phase 1, replicated pipelines: the 'gradient' kernel is written to the
//   context memory once per pipeline and loaded over the daisy chain; each
//   pipeline's data memory gets its own N iterations of 5 inputs; one run
//   computes both; the results are read back and checked.
//  Phase 2, context switch and cascade mode: reset, load a 12-stage kernel over
//   the 16 FUs of both pipelines, set cascade = 1 and run it; pipeline 0 reads
//   the inputs, pipeline 1 writes the results.
// Mechanisms counted (each must occur): context loads, both replicated
// pipelines executing in the same cycle, input back-pressure from
// FU 0, an FU waiting for its downstream stage, bypass instructions, cascade
// transfers between the pipelines, and a context switch.
module tb_overlay_top;
  import overlay_pkg::*;
  import kernels_pkg::*;
  localparam int NP = 2, NF = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              rst, ctx_we, ctx_start, ctx_busy, cascade, run_start;
  logic [8:0]        ctx_addr;
  ctx_word_t         ctx_wdata;
  logic [9:0]        ctx_len;
  logic [5:0]        frame_len [NP];
  logic              mem_en [NP], mem_we [NP], run_done [NP];
  logic [9:0]        mem_addr [NP];
  logic [31:0]       mem_wdata [NP], mem_rdata [NP];
  logic [10:0]       run_n_in, run_n_out;
  logic [9:0]        run_out_base;

  overlay_top dut (.*);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters.
  int n_parallel = 0, n_ctx_load = 0, n_bp = 0, n_ds_wait = 0, n_byp = 0, n_casc = 0, n_switch = 0;
  always @(posedge clk) if (!rst) begin
    if (ctx_start && !ctx_busy) n_ctx_load++;
    if (dut.g_pipe[0].u_pipe.u_in_fifo.count >= 5 && !dut.g_pipe[0].u_pipe.fu_ready[0]) n_bp++;
    if (dut.g_pipe[0].u_pipe.g_fu[0].u_fu.u_ctrl.state == 2'd0 && dut.g_pipe[0].u_pipe.g_fu[0].u_fu.u_ctrl.dc != 0
        && !dut.g_pipe[0].u_pipe.v[0] && !dut.g_pipe[0].u_pipe.rdy[1]) n_ds_wait++;
    if (dut.g_pipe[1].u_pipe.g_fu[7].u_fu.issue && !cascade) n_byp++;
    if (cascade && dut.i_valid[1]) n_casc++;
    if (!cascade && dut.g_pipe[0].u_pipe.g_fu[1].u_fu.issue && dut.g_pipe[1].u_pipe.g_fu[1].u_fu.issue) n_parallel++;
  end

  task automatic load_context(ctx_q_t prog);
    foreach (prog[i]) begin
      @(negedge clk); ctx_we = 1; ctx_addr = 9'(i); ctx_wdata = prog[i];
    end
    @(negedge clk); ctx_we = 0;
    ctx_start = 1; ctx_len = 10'(prog.size());
    @(negedge clk); ctx_start = 0;
    while (ctx_busy) @(negedge clk);
    repeat (NP * NF + 4) @(negedge clk);   // let the last word travel the chain
  endtask

  task automatic host_write(int p, int addr, logic [31:0] data);
    @(negedge clk);
    mem_en[p] = 1; mem_we[p] = 1; mem_addr[p] = 10'(addr); mem_wdata[p] = data;
    @(negedge clk);
    mem_en[p] = 0; mem_we[p] = 0;
  endtask

  task automatic host_read(int p, int addr, output logic [31:0] data);
    @(negedge clk);
    mem_en[p] = 1; mem_we[p] = 0; mem_addr[p] = 10'(addr);
    @(negedge clk);
    mem_en[p] = 0;
    #1 data = mem_rdata[p];
  endtask

  task automatic run(int n_in, int n_out, int base);
    @(negedge clk);
    run_n_in = 11'(n_in); run_n_out = 11'(n_out); run_out_base = 10'(base);
    run_start = 1; @(negedge clk); run_start = 0;
    @(negedge clk);
    while (!(run_done[0] && run_done[1])) @(negedge clk);
  endtask

  localparam int N = 40;         // gradient iterations per pipeline
  localparam int NC = 30;        // chain iterations
  localparam int DEPTH = 12;     // chain kernel depth (> 8 FUs: needs cascade)

  initial begin
    ctx_q_t prog, p1;
    logic [31:0] w [5], got;
    logic [31:0] expv [NP][N];
    logic [31:0] cexp [NC];
    int t0;

    rst = 1; ctx_we = 0; ctx_start = 0; ctx_addr = 0; ctx_wdata = '0; ctx_len = 0;
    cascade = 0; run_start = 0; run_n_in = 0; run_n_out = 0; run_out_base = 0;
    for (int p = 0; p < NP; p++) begin
      frame_len[p] = 6'd5; mem_en[p] = 0; mem_we[p] = 0; mem_addr[p] = 0; mem_wdata[p] = 0;
    end
    repeat (4) @(negedge clk);
    rst = 0;

    // ---- Phase 1: replicated gradient ----
    prog = gradient_ctx(1, NF);
    p1 = gradient_ctx(1 + NF, NF);
    foreach (p1[i]) prog.push_back(p1[i]);
    load_context(prog);
    for (int p = 0; p < NP; p++)
      for (int it = 0; it < N; it++) begin
        for (int i = 0; i < 5; i++) begin
          w[i] = $urandom % 65536;
          host_write(p, it * 5 + i, w[i]);
        end
        expv[p][it] = gradient_ref(w[0], w[1], w[2], w[3], w[4]);
      end
    t0 = $time;
    run(5 * N, N, 512);
    $display("gradient: %0d iterations on %0d pipelines in %0d cycles", N, NP, ($time - t0) / 10);
    for (int p = 0; p < NP; p++)
      for (int it = 0; it < N; it++) begin
        host_read(p, 512 + it, got);
        check(got == expv[p][it], $sformatf("gradient pipe %0d iter %0d: %h vs %h", p, it, got, expv[p][it]));
      end

    // ---- Phase 2: context switch to a deep kernel, cascade mode ----
    @(negedge clk); rst = 1; repeat (2) @(negedge clk); rst = 0;
    n_switch++;
    cascade = 1;
    frame_len[0] = 6'd2; frame_len[1] = 6'd2;
    load_context(chain_ctx(1, DEPTH, NP * NF));
    for (int it = 0; it < NC; it++) begin
      logic [31:0] x, a;
      x = $urandom % 1000; a = $urandom % 1000;
      host_write(0, 2 * it, x);
      host_write(0, 2 * it + 1, a);
      cexp[it] = chain_ref(x, a, DEPTH);
    end
    run(2 * NC, NC, 600);
    for (int it = 0; it < NC; it++) begin
      host_read(1, 600 + it, got);
      check(got == cexp[it], $sformatf("cascade iter %0d: %h vs %h", it, got, cexp[it]));
    end

    $display("parallel issue cycles=%0d", n_parallel);
    $display("mechanisms: ctx_load=%0d backpressure=%0d ds_wait=%0d bypass=%0d cascade=%0d switch=%0d",
             n_ctx_load, n_bp, n_ds_wait, n_byp, n_casc, n_switch);
    check(n_ctx_load == 2, "context loaded twice");
    check(n_parallel > 0, "replicated pipelines computed at the same time");
    check(n_bp > 0, "input back-pressure happened");
    check(n_ds_wait > 0, "an FU waited for its downstream stage");
    check(n_byp == N, "bypass FU ran once per iteration");
    check(n_casc == 2 * NC, "cascade transfers between pipelines");
    check(n_switch == 1, "context switch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
