// tb_vector_io_processor -- self-checking test of vector_io_processor.
//
// What: feature headers arrive at random; the testbench stands in for the
// DNN module (an input queue of 3 vectors, a random service time, a result
// queue whose class is a function of the vector) and for a downstream that
// is sometimes not ready. Checks: the feature vector pushed is the header's
// F1..F9; a header is dropped exactly when the identifier queue or the
// input queue is full; every result packet pairs a class with the flow
// identifier of the vector it came from, in order; the identifier-queue
// level matches the number of vectors in flight.
// Timing: all outputs are combinational in the header's cycle; the queues
// change at the clock edge. Watchdog at 500 us.
`timescale 1ns/1ps
module tb_vector_io_processor;
  import fenix_pkg::*;
  localparam int FD = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  feature_hdr_t in_hdr = '0;
  logic feat_push, feat_full = 0, res_empty = 1, res_pop, out_valid, out_ready = 0, drop;
  feature_t [WIN_SIZE-1:0] feat_data;
  logic [7:0] res_cls = 0;
  result_pkt_t out_pkt;
  logic [$clog2(FD):0] fid_level;
  int checks = 0, failures = 0, n_drop = 0, n_out = 0, n_acc = 0;

  typedef feature_t [WIN_SIZE-1:0] vec_t;
  vec_t        dnn_in [$];
  logic [7:0]  dnn_out [$];
  five_tuple_t exp_id [$];
  logic [7:0]  exp_cls [$];
  int busy_left;

  vector_io_processor #(.FID_DEPTH(FD)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  function automatic logic [7:0] cls_of(vec_t v);
    return v[0].len[7:0] ^ v[8].ipd[7:0];
  endfunction

  initial begin
    #500us;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit do_push, do_pop;
    int c;
    do_push = 0;
    do_pop  = 0;
    busy_left = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (c = 0; c < 6000; c++) begin
      @(negedge clk);
      // effects of the previous cycle's edge
      if (do_push) begin
        dnn_in.push_back(in_hdr.feat);
        exp_id.push_back(in_hdr.flow_id);
        exp_cls.push_back(cls_of(in_hdr.feat));
      end
      if (do_pop) void'(dnn_out.pop_front());
      // the stand-in DNN: one vector at a time
      if (busy_left > 0) begin
        busy_left--;
        if (busy_left == 0) dnn_out.push_back(cls_of(dnn_in.pop_front()));
      end else if (dnn_in.size() > 0 && dnn_out.size() < 3) begin
        busy_left = $urandom_range(1, (c < 3000) ? 12 : 2);
      end
      // new inputs
      in_valid       = ($urandom_range(2) == 0);
      in_hdr.flow_id = {$urandom, $urandom, $urandom, $urandom};
      for (int k = 0; k < WIN_SIZE; k++) in_hdr.feat[k] = {16'($urandom), 16'($urandom)};
      feat_full = (dnn_in.size() >= 3);
      res_empty = (dnn_out.size() == 0);
      res_cls   = res_empty ? 8'd0 : dnn_out[0];
      out_ready = ((c / 500) % 2 == 0) ? ($urandom_range(3) != 0) : ($urandom_range(7) == 0);
      #1;
      check(fid_level == ($clog2(FD)+1)'(exp_id.size()), "fid_level");
      check(drop == (in_valid && (feat_full || exp_id.size() == FD)), "drop when a queue is full");
      check(feat_push == (in_valid && !drop), "feat_push");
      if (feat_push) check(feat_data == in_hdr.feat, "feature vector");
      check(out_valid == (!res_empty && exp_id.size() > 0), "out_valid");
      if (out_valid) begin
        check(out_pkt.flow_id == exp_id[0], "result flow identifier");
        check(out_pkt.cls == exp_cls[0], "result class");
      end
      check(res_pop == (out_valid && out_ready), "res_pop");
      do_push = feat_push;
      do_pop  = res_pop;
      n_drop += int'(drop);
      n_acc  += int'(feat_push);
      if (res_pop) begin
        n_out++;
        void'(exp_id.pop_front());
        void'(exp_cls.pop_front());
      end
    end
    check(n_drop > 0 && n_out > 0, "drops and results seen");
    $display("accepted=%0d dropped=%0d results=%0d", n_acc, n_drop, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
