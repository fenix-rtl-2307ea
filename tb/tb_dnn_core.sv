// tb_dnn_core -- self-checking test of dnn_core for both models.
//
// What: a CNN instance (12 classes) and an RNN instance (7 classes) get the
// same random parameters through the parameter port; random feature vectors
// must give the class that the behavioural reference (fenix_ref_pkg,
// computed from the layer equations) gives. A second parameter set is loaded
// and checked too, which exercises reloading.
// Timing check: the number of cycles from taking the vector (in_pop) to
// pushing the class (out_push) must equal the documented schedule, and out_full
// must hold the result in place until it clears.
// Watchdog at 20 ms.
`timescale 1ns/1ps
module tb_dnn_core;
  import fenix_pkg::*;
  import fenix_ref_pkg::*;
  localparam int L = 16;
  logic clk = 0, rst_n = 0;
  logic prm_we = 0;
  logic [15:0] prm_addr = 0, prm_data = 0;
  logic in_valid [2];
  feature_t [WIN_SIZE-1:0] in_feat [2];
  logic in_pop [2], out_full [2], out_push [2], busy [2];
  logic [7:0] out_cls [2];
  int checks = 0, failures = 0;

  dnn_core #(.MODEL(MODEL_CNN), .NUM_CLASSES(12), .LANES(L)) u_cnn (
    .clk, .rst_n, .in_valid(in_valid[0]), .in_feat(in_feat[0]), .in_pop(in_pop[0]),
    .out_full(out_full[0]), .out_push(out_push[0]), .out_cls(out_cls[0]),
    .prm_we, .prm_addr, .prm_data, .busy(busy[0]));
  dnn_core #(.MODEL(MODEL_RNN), .NUM_CLASSES(7), .LANES(L)) u_rnn (
    .clk, .rst_n, .in_valid(in_valid[1]), .in_feat(in_feat[1]), .in_pop(in_pop[1]),
    .out_full(out_full[1]), .out_push(out_push[1]), .out_cls(out_cls[1]),
    .prm_we, .prm_addr, .prm_data, .busy(busy[1]));

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  task automatic load();
    randomize_params(L);
    foreach (prm_addr_q[i]) begin
      @(negedge clk);
      prm_we   = 1;
      prm_addr = 16'(prm_addr_q[i]);
      prm_data = 16'(prm_data_q[i]);
    end
    @(negedge clk);
    prm_we = 0;
  endtask

  task automatic run_one(int m, int hold);
    int cyc, ncls, exp_cls, lat;
    feature_t [WIN_SIZE-1:0] v;
    ncls = (m == 0) ? 12 : 7;
    v = rand_vec();
    exp_cls = ref_infer(m == 1, ncls, L, v);
    lat = ref_latency(m == 1, ncls, L);
    @(negedge clk);
    in_feat[m]  = v;
    in_valid[m] = 1;
    out_full[m] = (hold > 0);
    #1;
    check(in_pop[m], "vector taken when idle");
    @(negedge clk);
    in_valid[m] = 0;
    cyc = 1;
    while (!(out_push[m] || (busy[m] && out_full[m] && cyc >= lat)) && cyc < 100000) begin
      @(negedge clk);
      cyc++;
    end
    if (hold > 0) begin
      check(!out_push[m] && busy[m], "result held while the output queue is full");
      repeat (hold) @(negedge clk);
      check(!out_push[m], "still held");
      out_full[m] = 0;
      #1;
    end
    check(cyc == lat, $sformatf("model %0d latency %0d, expected %0d", m, cyc, lat));
    check(out_push[m], "result pushed");
    check(out_cls[m] == 8'(exp_cls), $sformatf("model %0d class %0d, expected %0d", m, out_cls[m], exp_cls));
    @(negedge clk);
    check(!busy[m], "idle after push");
  endtask

  initial begin
    #20ms;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 2; m++) begin
      in_valid[m] = 0;
      in_feat[m]  = '0;
      out_full[m] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int set = 0; set < 2; set++) begin
      load();
      for (int k = 0; k < 4; k++) begin
        run_one(0, (k == 1) ? 5 : 0);
        run_one(1, (k == 2) ? 5 : 0);
      end
    end
    $display("CNN latency %0d cycles, RNN latency %0d cycles",
             ref_latency(0, 12, L), ref_latency(1, 7, L));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
