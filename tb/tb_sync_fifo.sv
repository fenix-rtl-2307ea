// tb_sync_fifo -- self-checking test of sync_fifo.
//
// What: random pushes and pops against a queue model, with the FIFO driven
// to full and to empty several times.
// How: inputs change on the falling edge; the model is updated with what the
// FIFO does at the next rising edge, and show-ahead data, full, empty and
// count are compared every cycle. A push is seen at the output the cycle
// after it is written (one-cycle latency check).
// Interface/timing: 10 ns clock, watchdog at 200 us.
// Choices: depth 8 and width 16 keep the full/empty corners frequent.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic full, empty;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [W-1:0] q [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  initial begin
    #200us;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bias;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      check(empty == (q.size() == 0), "empty");
      check(full == (q.size() == D), "full");
      check(count == ($clog2(D)+1)'(q.size()), "count");
      if (q.size() > 0) check(rd_data == q[0], "show-ahead data");
      if (full) n_full++;
      if (empty) n_empty++;
      bias  = ((c / 200) % 2) ? 70 : 30;     // alternate filling and draining phases
      wr_en = !full && ($urandom_range(99) < bias);
      rd_en = !empty && ($urandom_range(99) >= bias);
      wr_data = W'($urandom);
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_data);
    end
    check(n_full > 0 && n_empty > 0, "reached both full and empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
