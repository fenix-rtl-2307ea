// tb_fenix_top_rnn -- end-to-end test of fenix_top in its second evaluated
// configuration: the recurrent model (one cell of 16 hidden units over the 9
// tokens, then a dense layer) with 7 classes, flow table and array at their
// default sizes. It is the same test as tb_fenix_top with the model switched;
// the reference class and the minimum result delay use the RNN's equations
// and its 426-cycle inference.
//
// What: 68 flows (four pairs of which collide in the flow table) send
// packets on almost every cycle, with one long idle gap. The control plane
// programs a random probability table, a random packet-level decision tree,
// the token cost and cap, resets the counting window periodically, and
// loads random model parameters on the DNN clock.
// Checks, against a model kept by the testbench:
//  * every forwarding verdict (one cycle after the packet): the flow's class
//    from the last inference result if it has one, otherwise the decision
//    tree's class for the packet's length and inter-packet delay;
//  * new-flow and collision events, Flow_cnt and Pkt_cnt;
//  * inference results: each mirrored feature header that is not dropped
//    yields one result, in order, whose class is the behavioural reference's
//    class for the header the model built (oldest-first F1..F9); the result
//    reaches the flow table and is then used for the flow's later packets.
// Each mechanism is counted and the test fails if one never happens: new
// flow, collision, ring wrap, window reset, send, not sampled, no token,
// bucket capped, feature drop (model engine full), result, infer update,
// ingress stall, verdict by the tree and verdict by a stored class.
// Timing: switch clock 10 ns, DNN clock 4 ns; results must arrive in order
// and no sooner than one inference time after their header.
// Watchdog at 2 ms of simulated time.
`timescale 1ns/1ps
module tb_fenix_top_rnn;
  import fenix_pkg::*;
  import fenix_ref_pkg::*;
  localparam int NF = 68, FL = 4096, NCLS = 7, L = 16, DTD = 4;

  logic clk = 0, clk_dnn = 0, rst_n = 0, rst_dnn_n = 0;
  logic pkt_valid = 0, pkt_ready;
  five_tuple_t pkt_tuple = '0;
  logic [15:0] pkt_len = 0;
  logic fwd_valid, fwd_by_dt;
  five_tuple_t fwd_tuple;
  logic [7:0] fwd_cls;
  logic window_reset = 0;
  logic [31:0] flow_cnt, pkt_cnt, bucket;
  logic prob_we = 0, dt_we = 0, prm_we = 0;
  logic [7:0] prob_waddr = 0;
  logic [8:0] prob_wdata = 0;
  logic [DTD:0] dt_addr = 0;
  logic [18:0] dt_data = 0;
  logic [31:0] cfg_cost = 100, cfg_bucket_max = 400;
  logic [15:0] prm_addr = 0, prm_data = 0;
  logic ev_new_flow, ev_collision, ev_send, ev_not_sampled, ev_no_token, ev_capped;
  logic ev_infer_update, ev_ring_wrap, ev_stall, ev_drop, ev_result, dnn_busy;
  logic [5:0] fid_level;

  fenix_top #(.MODEL(MODEL_RNN), .NUM_CLASSES(NCLS)) dut (.*);

  always #5 clk = ~clk;
  always #2 clk_dnn = ~clk_dnn;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  // ---------------------------------------------------------------- model
  typedef feature_t [WIN_SIZE-1:0] vec_t;
  five_tuple_t tup [NF];
  int          row [NF];
  int          owner [FL];
  feature_t    hist [NF][$];
  longint      last_t [NF];
  bit          cv [NF], seen [NF];
  int          cl [NF];
  int          dsel [1 << DTD], dthr [1 << DTD], dleaf [1 << DTD];
  int          m_flow_cnt = 0, m_pkt_cnt = 0;
  logic [31:0] tnow;

  typedef struct { int f; int cls; longint t; } res_t;
  res_t exp_res [$];
  res_t pend_res;
  bit   pend_valid = 0;
  bit   fwd_exp_valid = 0;
  five_tuple_t fwd_exp_tuple;
  int   fwd_exp_cls;
  bit   fwd_exp_dt;

  int n_new = 0, n_coll = 0, n_wrap = 0, n_win = 0, n_send = 0, n_ns = 0, n_nt = 0;
  int n_cap = 0, n_drop = 0, n_res = 0, n_inf = 0, n_stall = 0, n_fdt = 0, n_fcls = 0;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) tnow <= 32'd1;
    else        tnow <= tnow + 32'd1;

  function automatic int dt_walk(int len, int ipd);
    int n, f;
    n = 1;
    for (int l = 0; l < DTD; l++) begin
      f = (dsel[n] == 0) ? len : ipd;
      n = 2 * n + ((f > dthr[n]) ? 1 : 0);
    end
    return dleaf[n - (1 << DTD)];
  endfunction

  initial begin
    #2ms;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- control plane
  task automatic program_switch();
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      prob_we    = 1;
      prob_waddr = 8'(a);
      prob_wdata = 9'($urandom_range(96, 256));
    end
    @(negedge clk);
    prob_we = 0;
    for (int i = 1; i < (1 << DTD); i++) begin
      dsel[i] = $urandom_range(1);
      dthr[i] = (dsel[i] == 0) ? $urandom_range(1500) : $urandom_range(200);
      @(negedge clk);
      dt_we   = 1;
      dt_addr = (DTD+1)'(i);
      dt_data = {3'(dsel[i]), 16'(dthr[i])};
    end
    for (int i = 0; i < (1 << DTD); i++) begin
      dleaf[i] = $urandom_range(NCLS - 1);
      @(negedge clk);
      dt_we   = 1;
      dt_addr = (DTD+1)'((1 << DTD) + i);
      dt_data = 19'(dleaf[i]);
    end
    @(negedge clk);
    dt_we = 0;
  endtask

  task automatic load_model();
    randomize_params(L);
    foreach (prm_addr_q[i]) begin
      @(negedge clk_dnn);
      prm_we   = 1;
      prm_addr = 16'(prm_addr_q[i]);
      prm_data = 16'(prm_data_q[i]);
    end
    @(negedge clk_dnn);
    prm_we = 0;
  endtask

  function automatic int idx_of(five_tuple_t t);
    return int'(flow_hash(t) & (FL - 1));
  endfunction

  // ---------------------------------------------------------------- traffic
  initial begin
    int f, r, n, cyc, idle_until;
    bit match;
    longint d;
    int ipd_v;
    feature_t cur;
    vec_t v;

    // flows: 60 independent, then 4 colliding pairs
    for (int k = 0; k < NF; k++) begin
      if (k < NF - 4) tup[k] = {$urandom, $urandom, $urandom, $urandom};
      else begin
        do tup[k] = {$urandom, $urandom, $urandom, $urandom};
        while (idx_of(tup[k]) != idx_of(tup[k - 4]));
      end
      row[k]    = idx_of(tup[k]);
      cv[k]     = 0;
      seen[k]   = 0;
      last_t[k] = 0;
    end
    for (int k = 0; k < FL; k++) owner[k] = -1;

    repeat (3) @(negedge clk);
    rst_n     = 1;
    rst_dnn_n = 1;
    fork
      program_switch();
      load_model();
    join

    idle_until = 0;
    for (cyc = 0; cyc < 40000; cyc++) begin
      @(negedge clk);
      // verdict of the previous cycle's packet
      check(fwd_valid == fwd_exp_valid, "fwd_valid");
      if (fwd_exp_valid && fwd_valid) begin
        check(fwd_tuple == fwd_exp_tuple, "fwd_tuple");
        check(fwd_by_dt == fwd_exp_dt, "fwd_by_dt");
        check(fwd_cls == 8'(fwd_exp_cls), $sformatf("fwd_cls %0d expected %0d", fwd_cls, fwd_exp_cls));
        n_fdt  += int'(fwd_exp_dt);
        n_fcls += int'(!fwd_exp_dt);
      end
      check(flow_cnt == 32'(m_flow_cnt), "flow_cnt");
      check(pkt_cnt == 32'(m_pkt_cnt), "pkt_cnt");
      fwd_exp_valid = 0;

      // drive: keep a stalled packet, otherwise pick a new one
      window_reset = (cyc % 7000 == 6999);
      if (cyc == 20000) idle_until = cyc + 600;
      if (!(pkt_valid && !pkt_ready)) begin
        pkt_valid = (cyc >= idle_until) && ($urandom_range(9) != 0);
        f         = ($urandom_range(4) == 0) ? $urandom_range(NF - 8, NF - 1) : $urandom_range(NF - 1);
        pkt_tuple = tup[f];
        pkt_len   = 16'($urandom_range(40, 1500));
      end
      #1;
      if (window_reset) begin
        n_win++;
        m_flow_cnt = 0;
        m_pkt_cnt  = 0;
        for (int k = 0; k < NF; k++) seen[k] = 0;
      end
      // a header mirrored last cycle is either queued or dropped now
      if (pend_valid) begin
        if (ev_drop) n_drop++;
        else exp_res.push_back(pend_res);
        pend_valid = 0;
      end
      else check(!ev_drop, "drop without a header");
      n_ns  += int'(ev_not_sampled);
      n_nt  += int'(ev_no_token);
      n_cap += int'(ev_capped);
      n_stall += int'(ev_stall);
      check(pkt_ready == !ev_result, "results take the flow table port");
      if (ev_result) begin
        res_t e;
        n_res++;
        check(exp_res.size() > 0, "result without a header");
        if (exp_res.size() > 0) begin
          e = exp_res.pop_front();
          check(longint'(tnow) - e.t >= longint'(ref_latency(1, NCLS, L)) * 4 / 10,
                "result no sooner than one inference");
          check(ev_infer_update == (owner[row[e.f]] == e.f), "infer update only for a resident flow");
          if (owner[row[e.f]] == e.f) begin
            cv[e.f] = 1;
            cl[e.f] = e.cls;
            n_inf++;
          end
        end
      end else check(!ev_infer_update, "no infer update without a result");
      if (!(pkt_valid && pkt_ready)) begin
        check(!ev_send && !ev_new_flow, "no packet events without a packet");
        continue;
      end
      // the regular packet of this cycle
      for (f = 0; f < NF; f++) if (tup[f] == pkt_tuple) break;
      r     = row[f];
      match = (owner[r] == f);
      check(ev_new_flow == !match, "ev_new_flow");
      check(ev_collision == (!match && owner[r] >= 0), "ev_collision");
      n_new  += int'(!match);
      n_coll += int'(!match && owner[r] >= 0);
      if (!match) begin
        owner[r] = f;
        hist[f].delete();
        cv[f]   = 0;
        seen[f] = 0;
        ipd_v   = 0;
      end else begin
        d = longint'(tnow) - last_t[f];
        ipd_v = (d > 65535) ? 65535 : int'(d);
      end
      n_wrap += int'(ev_ring_wrap);
      last_t[f] = longint'(tnow);
      m_flow_cnt += int'(!seen[f]);
      seen[f] = 1;
      m_pkt_cnt++;
      cur.len = pkt_len;
      cur.ipd = 16'(ipd_v);
      fwd_exp_valid = 1;
      fwd_exp_tuple = pkt_tuple;
      fwd_exp_dt    = !cv[f];
      fwd_exp_cls   = cv[f] ? cl[f] : dt_walk(int'(pkt_len), ipd_v);
      if (ev_send) begin
        n_send++;
        n = hist[f].size();
        for (int k = 0; k < 8; k++) v[k] = (k < 8 - n) ? feature_t'('0) : hist[f][k - (8 - n)];
        v[8] = cur;
        pend_res.f   = f;
        pend_res.cls = ref_infer(1, NCLS, L, v);
        pend_res.t   = longint'(tnow);
        pend_valid   = 1;
      end
      hist[f].push_back(cur);
      if (hist[f].size() > 8) void'(hist[f].pop_front());
    end

    check(n_new > 0,   "mechanism: new flow");
    check(n_coll > 0,  "mechanism: hash collision");
    check(n_wrap > 0,  "mechanism: ring buffer wrap");
    check(n_win > 0,   "mechanism: window reset");
    check(n_send > 0,  "mechanism: mirror (send)");
    check(n_ns > 0,    "mechanism: not sampled");
    check(n_nt > 0,    "mechanism: no token");
    check(n_cap > 0,   "mechanism: bucket capped");
    check(n_drop > 0,  "mechanism: header dropped (model engine full)");
    check(n_res > 0,   "mechanism: inference result");
    check(n_inf > 0,   "mechanism: class stored");
    check(n_stall > 0, "mechanism: ingress stall");
    check(n_fdt > 0,   "mechanism: verdict by decision tree");
    check(n_fcls > 0,  "mechanism: verdict by stored class");
    $display("new=%0d coll=%0d wrap=%0d win=%0d send=%0d not_sampled=%0d no_token=%0d capped=%0d",
             n_new, n_coll, n_wrap, n_win, n_send, n_ns, n_nt, n_cap);
    $display("drop=%0d results=%0d stored=%0d stall=%0d fwd_dt=%0d fwd_cls=%0d",
             n_drop, n_res, n_inf, n_stall, n_fdt, n_fcls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
