// tb_buffer_manager -- self-checking test of buffer_manager.
//
// What: random packets of 16 flow slots, with the per-flow buff_idx walking
// 1..8 and restarting at 1 on a new flow (whose ring must read as zeros).
// On every send, the registered header one cycle later must hold the flow
// identifier and F1..F9: the flow's previous eight features, oldest first,
// followed by the current packet's feature.
// How: the model keeps a list of each slot's features; buff_idx is generated
// by the testbench the way the flow tracker does it.
// Timing: hdr_valid rises exactly one cycle after the packet (latency check).
// Watchdog at 200 us.
`timescale 1ns/1ps
module tb_buffer_manager;
  import fenix_pkg::*;
  localparam int F = 16;
  logic clk = 0, rst_n = 0;
  logic pkt_valid = 0, new_flow = 0, send = 0, hdr_valid;
  logic [3:0] idx = 0;
  logic [3:0] buff_idx = 1;
  feature_t feat = '0;
  five_tuple_t flow_id = '0;
  feature_hdr_t hdr;
  int checks = 0, failures = 0, n_wrap = 0, n_send = 0;
  int bidx [F];
  feature_t hist [F][$];
  feature_hdr_t exp_hdr;
  bit exp_valid;

  buffer_manager #(.FLOWS(F)) dut (.*);

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
    int n, i;
    for (int k = 0; k < F; k++) bidx[k] = 0;
    exp_valid = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      // header of the previous cycle's send
      check(hdr_valid == exp_valid, "hdr_valid one cycle after send");
      if (exp_valid) check(hdr == exp_hdr, "header contents");
      pkt_valid = ($urandom_range(4) != 0);
      i         = $urandom_range(F - 1);
      idx       = 4'(i);
      new_flow  = (bidx[i] == 0) || ($urandom_range(60) == 0);
      if (pkt_valid && new_flow) begin
        bidx[i] = 1;
        hist[i].delete();
      end
      buff_idx  = 4'(bidx[i]);
      feat.len  = 16'($urandom_range(1500));
      feat.ipd  = 16'($urandom);
      flow_id   = {$urandom, $urandom, $urandom, $urandom};
      send      = ($urandom_range(2) == 0);
      exp_valid = pkt_valid && send;
      if (pkt_valid) begin
        n = hist[i].size();
        exp_hdr.flow_id = flow_id;
        for (int k = 0; k < 8; k++)
          exp_hdr.feat[k] = (k < 8 - n) ? '0 : hist[i][k - (8 - n)];
        exp_hdr.feat[8] = feat;
        hist[i].push_back(feat);
        if (hist[i].size() > 8) void'(hist[i].pop_front());
        if (bidx[i] == 8) n_wrap++;
        bidx[i] = (bidx[i] == 8) ? 1 : bidx[i] + 1;
        n_send += int'(send);
      end
    end
    check(n_wrap > 0 && n_send > 0, "ring wrapped and headers were sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
