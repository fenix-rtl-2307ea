// tb_flow_tracker -- self-checking test of flow_tracker.
//
// What: 40 flows share a 16-row table, so hash collisions (evictions) are
// frequent. Regular packets, inference packets (results carrying a class,
// also for evicted flows) and control-plane window resets are mixed at random
// with a random send decision. Every cycle the lookup outputs (new flow,
// T_i, C_i, inter-packet delay, buff_idx, stored class) and the events are
// compared with a model kept per flow; Flow_cnt and Pkt_cnt are compared the
// cycle after.
// How: the model records which flow owns each row and, per flow, its backlog
// count and time, last arrival, ring slot, class and whether it has been
// counted in the current window. Row index = low bits of the CRC-32 flow hash.
// Timing: outputs are combinational in the packet's cycle; state and counters
// change at the edge. Watchdog at 500 us.
`timescale 1ns/1ps
module tb_flow_tracker;
  import fenix_pkg::*;
  localparam int F = 16, NF = 40;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_is_infer = 0, window_reset = 0, send = 0;
  five_tuple_t in_tuple = '0;
  logic [7:0] in_cls = 0;
  logic [31:0] now = 1;
  logic [31:0] flow_cnt, pkt_cnt, ti;
  logic [3:0] idx, buff_idx;
  logic is_new, has_class;
  logic [15:0] ci, ipd;
  logic [7:0] cls;
  logic ev_new_flow, ev_collision, ev_infer_update, ev_ring_wrap;
  int checks = 0, failures = 0;
  int n_new = 0, n_coll = 0, n_inf = 0, n_wrap = 0, n_win = 0, n_cls = 0, n_stale = 0;

  five_tuple_t tup [NF];
  int owner [F];
  longint bn [NF], bt [NF], lt [NF];
  int bi [NF], cl [NF];
  bit cv [NF], seen [NF];
  int m_flow_cnt, m_pkt_cnt;

  flow_tracker #(.FLOWS(F), .TS_W(32)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 32'($urandom_range(1, 3));

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

  initial begin
    int f, r;
    bit match, counted;
    longint d;
    for (int k = 0; k < NF; k++) tup[k] = {$urandom, $urandom, $urandom, $urandom};
    for (int k = 0; k < F; k++) owner[k] = -1;
    m_flow_cnt = 0;
    m_pkt_cnt  = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 8000; c++) begin
      @(negedge clk);
      check(flow_cnt == 32'(m_flow_cnt), "flow_cnt");
      check(pkt_cnt == 32'(m_pkt_cnt), "pkt_cnt");
      in_valid     = ($urandom_range(5) != 0);
      in_is_infer  = ($urandom_range(5) == 0);
      window_reset = ($urandom_range(300) == 0);
      send         = ($urandom_range(3) == 0);
      f            = $urandom_range(NF - 1);
      in_tuple     = tup[f];
      in_cls       = 8'($urandom_range(11));
      r            = int'(flow_hash(tup[f]) & (F - 1));
      match        = (owner[r] == f);
      #1;
      if (window_reset) begin
        n_win++;
        m_flow_cnt = 0;
        m_pkt_cnt  = 0;
        for (int k = 0; k < NF; k++) seen[k] = 0;
      end
      if (!in_valid) continue;
      check(idx == 4'(r), "row index");
      check(is_new == !match, "is_new");
      if (in_is_infer) begin
        check(ev_infer_update == match, "ev_infer_update");
        check(!ev_new_flow && !ev_collision && !ev_ring_wrap, "no regular events on a result");
        if (match) begin
          cv[f] = 1;
          cl[f] = in_cls;
          n_inf++;
        end else n_stale++;
        continue;
      end
      check(ev_new_flow == !match, "ev_new_flow");
      check(ev_collision == (!match && owner[r] >= 0), "ev_collision");
      n_new  += int'(!match);
      n_coll += int'(!match && owner[r] >= 0);
      if (match) begin
        check(ti == 32'(longint'(now) - bt[f]), "T_i");
        check(ci == 16'(bn[f] + 1), "C_i");
        d = longint'(now) - lt[f];
        check(ipd == ((d > 65535) ? 16'hFFFF : 16'(d)), "ipd");
        check(buff_idx == 4'(bi[f]), "buff_idx");
        check(has_class == cv[f], "has_class");
        if (cv[f]) begin
          check(cls == 8'(cl[f]), "stored class");
          n_cls++;
        end
      end else begin
        check(ti == 0 && ci == 1 && ipd == 0 && buff_idx == 1 && !has_class, "new flow outputs");
        owner[r] = f;
        bn[f] = 0;
        bt[f] = longint'(now);
        bi[f] = 1;
        cv[f] = 0;
        seen[f] = 0;
      end
      check(ev_ring_wrap == (bi[f] == 8), "ev_ring_wrap");
      n_wrap += int'(bi[f] == 8);
      counted = !seen[f];
      seen[f] = 1;
      m_flow_cnt += int'(counted);
      m_pkt_cnt++;
      if (send) begin
        bn[f] = 0;
        bt[f] = longint'(now);
      end else bn[f] = bn[f] + 1;
      lt[f] = longint'(now);
      bi[f] = (bi[f] == 8) ? 1 : bi[f] + 1;
    end
    check(n_new > 0 && n_coll > 0 && n_inf > 0 && n_wrap > 0 && n_win > 0 && n_cls > 0 && n_stale > 0,
          "all mechanisms exercised");
    $display("new=%0d collisions=%0d infer=%0d stale=%0d wraps=%0d windows=%0d class_hits=%0d",
             n_new, n_coll, n_inf, n_stale, n_wrap, n_win, n_cls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
