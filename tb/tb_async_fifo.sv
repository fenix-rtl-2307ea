// tb_async_fifo -- self-checking test of async_fifo across two clocks.
//
// What: a writer on a 10 ns clock and a reader on a 7 ns clock exchange
// 600 random words; every word must arrive once, in order.
// How: the writer pushes when not full (bursty), the reader pops when not
// empty and compares with the writer's queue. The reader is slowed down for
// a while so that full is reached, then drains. Latency check: the first
// word must become visible to the reader within 4 read-clock cycles of being
// written (two-flop synchroniser plus the registered empty flag).
// Interface/timing: watchdog at 500 us.
`timescale 1ns/1ps
module tb_async_fifo;
  localparam int W = 32, AW = 3, N = 600;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic winc = 0, rinc = 0, wfull, rempty;
  logic [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0, n_full = 0, sent = 0, got = 0;
  logic [W-1:0] q [$];
  bit slow_reader = 0;

  async_fifo #(.WIDTH(W), .ADDR_W(AW)) dut (.*);

  always #5   wclk = ~wclk;
  always #3.5 rclk = ~rclk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  initial begin
    #500us;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // first-word latency
  initial begin
    int cyc;
    @(posedge wrst_n);
    @(negedge wclk);
    winc  = 1;
    wdata = 32'hC0FFEE00;
    q.push_back(wdata);
    sent++;
    @(negedge wclk);
    winc = 0;
    cyc = 0;
    while (rempty && cyc < 10) begin
      @(posedge rclk);
      cyc++;
    end
    check(cyc <= 4, $sformatf("first word visible after %0d read cycles", cyc));
    // writer
    while (sent < N) begin
      @(negedge wclk);
      if (wfull) n_full++;
      winc = !wfull && ($urandom_range(3) != 0);
      wdata = $urandom;
      if (winc) begin
        q.push_back(wdata);
        sent++;
      end
    end
    @(negedge wclk);
    winc = 0;
  end

  // reader
  initial begin
    repeat (3) @(negedge rclk);
    wrst_n = 1;
    rrst_n = 1;
    while (got < N) begin
      @(negedge rclk);
      slow_reader = (got > 100 && got < 140);
      rinc = !rempty && (slow_reader ? ($urandom_range(15) == 0) : ($urandom_range(2) != 0));
      if (rinc) begin
        check(q.size() > 0, "data without a write");
        if (q.size() > 0) check(rdata == q.pop_front(), "order/data");
        got++;
      end
    end
    @(negedge rclk);
    rinc = 0;
    repeat (6) @(negedge rclk);
    check(rempty, "empty after all words read");
    check(n_full > 0, "full was reached");
    check(got == N, "all words received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
