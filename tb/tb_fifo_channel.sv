// tb_fifo_channel: the FIFO channel in both read modes.
//  Streaming (frame_len = 0): random pushes and random consumer readiness;
//   the words come out in order; wr_ready and burst_ready follow the fill level.
//  Framed (frame_len = 5): a frame starts only with 5 words stored and rd_ready
//   high, is emitted on 5 consecutive cycles even if rd_ready falls, and is
//   followed by at least one cycle with rd_valid low; 2 leftover words stay.
module tb_fifo_channel;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, wr_valid, wr_ready, burst_ready, rd_ready, rd_valid;
  logic [31:0] wr_data, rd_data;
  logic [5:0] frame_len;
  logic [6:0] count;

  fifo_channel dut (.*);

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

  logic [31:0] q [$];
  int popped = 0;

  initial begin
    rst = 1; wr_valid = 0; wr_data = 0; rd_ready = 0; frame_len = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    // Streaming mode.
    for (int n = 0; n < 2000; n++) begin
      bit do_push;
      do_push = (n < 1700) && ($urandom % 3 != 0) && (count < 7'd62);
      wr_valid = do_push; wr_data = $urandom;
      rd_ready = (n < 300) ? 1'b0 : ($urandom % 2 == 0);
      #1;
      check(wr_ready == (count <= 7'd62), "wr_ready threshold");
      check(burst_ready == (count <= 7'd32), "burst_ready threshold");
      if (rd_valid && rd_ready) begin
        check(q.size() > 0 && rd_data == q[0], "stream order");
        void'(q.pop_front()); popped++;
      end
      if (do_push) q.push_back(wr_data);
      @(negedge clk);
    end
    wr_valid = 0; rd_ready = 1;
    while (rd_valid) begin
      check(rd_data == q[0], "stream drain order"); void'(q.pop_front()); popped++;
      @(negedge clk);
    end
    check(q.size() == 0, "all streamed words out");

    // Framed mode.
    frame_len = 6'd5; rd_ready = 0;
    for (int i = 0; i < 12; i++) begin
      wr_valid = 1; wr_data = 32'h100 + i; q.push_back(wr_data); @(negedge clk);
    end
    wr_valid = 0;
    check(!rd_valid, "no frame without rd_ready");
    for (int f = 0; f < 2; f++) begin
      rd_ready = 1;
      #1;
      for (int i = 0; i < 5; i++) begin
        check(rd_valid, "frame words on consecutive cycles");
        check(rd_data == q[0], "frame order");
        void'(q.pop_front());
        @(negedge clk);
        rd_ready = 0;   // dropping ready mid-frame must not stop it
        #1;
      end
      check(!rd_valid, "gap after a frame");
      @(negedge clk);
    end
    rd_ready = 1;
    repeat (3) begin #1; check(!rd_valid, "partial frame held back"); @(negedge clk); end
    check(count == 7'd2, "two words left");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
