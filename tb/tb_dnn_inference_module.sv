// tb_dnn_inference_module -- self-checking test of dnn_inference_module.
//
// What: the I/O side (10 ns clock) pushes 20 random feature vectors as fast
// as the input queue allows; the DNN side (4 ns clock) computes them; the
// I/O side pops the classes with random back-pressure. Every class must
// match the behavioural reference, in order. The input queue must fill up
// (the DNN is slower than the I/O side), and the output queue must fill up
// while the reader pauses.
// Timing check: busy stays high for exactly the documented number of DNN
// clock cycles per inference when the output queue has room, once per vector.
// Watchdog at 5 ms.
`timescale 1ns/1ps
module tb_dnn_inference_module;
  import fenix_pkg::*;
  import fenix_ref_pkg::*;
  localparam int L = 16, N = 20, NCLS = 12;
  logic clk_io = 0, clk_dnn = 0, rst_io_n = 0, rst_dnn_n = 0;
  logic in_push = 0, in_full, out_pop = 0, out_empty, busy;
  feature_t [WIN_SIZE-1:0] in_data = '0;
  logic [7:0] out_cls;
  logic prm_we = 0;
  logic [15:0] prm_addr = 0, prm_data = 0;
  int checks = 0, failures = 0, n_in_full = 0, got = 0, sent = 0;
  int exp_q [$];
  int min_run, n_runs = 0;

  dnn_inference_module #(.MODEL(MODEL_CNN), .NUM_CLASSES(NCLS), .LANES(L), .IN_AW(3), .OUT_AW(3)) dut (.*);

  always #5 clk_io = ~clk_io;
  always #2 clk_dnn = ~clk_dnn;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  initial begin
    #5ms;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // busy runs on the DNN side: one per inference
  initial begin
    int run;
    run = 0;
    min_run = 1 << 30;
    @(posedge rst_dnn_n);
    forever begin
      @(posedge clk_dnn);
      if (busy) run++;
      else if (run > 0) begin
        if (run < min_run) min_run = run;
        n_runs++;
        run = 0;
      end
    end
  end

  initial begin
    feature_t [WIN_SIZE-1:0] v;
    repeat (3) @(negedge clk_dnn);
    rst_dnn_n = 1;
    rst_io_n  = 1;
    randomize_params(L);
    foreach (prm_addr_q[i]) begin
      @(negedge clk_dnn);
      prm_we   = 1;
      prm_addr = 16'(prm_addr_q[i]);
      prm_data = 16'(prm_data_q[i]);
    end
    @(negedge clk_dnn);
    prm_we = 0;
    fork
      begin
        while (sent < N) begin
          @(negedge clk_io);
          if (in_full) n_in_full++;
          in_push = !in_full;
          if (in_push) begin
            v = rand_vec();
            in_data = v;
            exp_q.push_back(ref_infer(0, NCLS, L, v));
            sent++;
          end
        end
        @(negedge clk_io);
        in_push = 0;
      end
      begin
        // reader pauses long enough for the output queue to fill
        repeat (30000) @(negedge clk_io);
        while (got < N) begin
          @(negedge clk_io);
          out_pop = !out_empty && ($urandom_range(2) == 0);
          if (out_pop) begin
            check(exp_q.size() > 0, "result without a vector");
            if (exp_q.size() > 0) check(out_cls == 8'(exp_q.pop_front()), "class in order");
            got++;
          end
        end
        @(negedge clk_io);
        out_pop = 0;
      end
    join
    repeat (10) @(negedge clk_io);
    check(out_empty && !busy, "drained");
    check(n_in_full > 0, "input queue filled");
    check(n_runs == N && min_run == ref_latency(0, NCLS, L),
          $sformatf("%0d inferences, shortest %0d DNN cycles", n_runs, min_run));
    $display("input-full cycles=%0d inferences=%0d shortest=%0d cycles", n_in_full, n_runs, min_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
