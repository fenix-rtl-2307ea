// tb_rate_limiter -- self-checking test of rate_limiter (Algorithm 1).
//
// What: phase 1 drives random packets (random T_i, C_i, gaps) with a random
// probability table, cost and bucket cap, and compares send, the bucket
// level and the three events with a cycle-by-cycle model of the algorithm:
// gap = now - T_last (0 before the first packet), bucket refilled by the gap
// and capped, send when rand < P(T_i, C_i) and bucket >= cost.
// Phase 2 checks the rate: with every probability at 1 and a packet every
// cycle, a cost of K cycles must give one mirrored packet per K cycles,
// i.e. the token bucket bounds the mirror rate at the configured value.
// How: the model keeps its own copy of the 16-bit Galois LFSR (taps 0xB400,
// the documented random source) and of the table.
// Timing: decisions are combinational in the packet's cycle; state updates at
// the clock edge. Watchdog at 500 us.
`timescale 1ns/1ps
module tb_rate_limiter;
  localparam int TB = 16, CB = 16, TSH = 11, CSH = 1;
  logic clk = 0, rst_n = 0;
  logic pkt_valid = 0;
  logic [31:0] now = 1, ti = 0, cfg_cost = 0, cfg_bucket_max = 0, bucket;
  logic [15:0] ci = 0;
  logic tbl_we = 0;
  logic [7:0] tbl_waddr = 0;
  logic [8:0] tbl_wdata = 0;
  logic send, ev_not_sampled, ev_no_token, ev_capped;
  int checks = 0, failures = 0;
  int n_send = 0, n_ns = 0, n_nt = 0, n_cap = 0;
  int ptab [TB*CB];
  longint m_bucket, m_tlast;
  logic [15:0] m_lfsr;

  rate_limiter #(.TS_W(32), .T_BINS(TB), .C_BINS(CB), .T_SHIFT(TSH), .C_SHIFT(CSH),
                 .PROB_W(8), .SEED(16'hACE1)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 1;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  task automatic write_table(bit all_one);
    for (int a = 0; a < TB*CB; a++) begin
      @(negedge clk);
      ptab[a]   = all_one ? 256 : $urandom_range(256);
      tbl_we    = 1;
      tbl_waddr = 8'(a);
      tbl_wdata = 9'(ptab[a]);
    end
    @(negedge clk);
    tbl_we = 0;
  endtask

  // one model step for a packet in this cycle; checks the DUT outputs
  task automatic step();
    longint gap, sum, refill;
    int tbin, cbin, p;
    logic [15:0] nx;
    bit sampled, m_send;
    nx   = {1'b0, m_lfsr[15:1]} ^ (m_lfsr[0] ? 16'hB400 : 16'h0000);
    tbin = (ti >> TSH) >= TB ? TB - 1 : int'(ti >> TSH);
    cbin = (ci >> CSH) >= CB ? CB - 1 : int'(ci >> CSH);
    p    = ptab[tbin*CB + cbin];
    gap  = (m_tlast == 0) ? 0 : longint'(now) - m_tlast;
    sum  = m_bucket + gap;
    refill = (sum > longint'(cfg_bucket_max)) ? longint'(cfg_bucket_max) : sum;
    sampled = int'(nx[7:0]) < p;
    m_send  = sampled && refill >= longint'(cfg_cost);
    check(send == m_send, "send");
    check(ev_not_sampled == !sampled, "ev_not_sampled");
    check(ev_no_token == (sampled && refill < longint'(cfg_cost)), "ev_no_token");
    check(ev_capped == (sum > longint'(cfg_bucket_max)), "ev_capped");
    n_send += int'(send);
    n_ns   += int'(ev_not_sampled);
    n_nt   += int'(ev_no_token);
    n_cap  += int'(ev_capped);
    m_lfsr   = nx;
    m_tlast  = longint'(now);
    m_bucket = m_send ? refill - longint'(cfg_cost) : refill;
  endtask

  initial begin
    #500us;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sends0, cyc;
    m_bucket = 0;
    m_tlast  = 0;
    m_lfsr   = 16'hACE1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    write_table(0);
    cfg_cost = 40;
    cfg_bucket_max = 300;
    // phase 1: random traffic
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      if (n % 1500 == 0) begin
        cfg_cost = $urandom_range(10, 80);
        cfg_bucket_max = $urandom_range(100, 600);
      end
      pkt_valid = (($urandom_range(3) == 0) || (n > 3000 && n < 3500)) && !(n > 1000 && n < 1400);
      ti = ($urandom_range(7) == 0) ? $urandom : $urandom_range(40000);
      ci = 16'($urandom_range(40));
      #1;
      check(bucket == 32'(m_bucket), "bucket level");
      if (pkt_valid) step();
      else check(!send, "no send without a packet");
    end
    check(n_send > 0 && n_ns > 0 && n_nt > 0 && n_cap > 0, "all outcomes seen");
    // phase 2: rate check
    @(negedge clk);
    pkt_valid = 0;
    write_table(1);
    cfg_cost = 25;
    cfg_bucket_max = 25;
    sends0 = n_send;
    cyc = 2500;
    for (int n = 0; n < cyc; n++) begin
      @(negedge clk);
      pkt_valid = 1;
      ti = 0;
      ci = 1;
      #1;
      step();
    end
    @(negedge clk);
    pkt_valid = 0;
    check((n_send - sends0) >= cyc / 25 - 1 && (n_send - sends0) <= cyc / 25 + 1,
          $sformatf("rate: %0d sends in %0d cycles at cost 25", n_send - sends0, cyc));
    $display("sends=%0d not_sampled=%0d no_token=%0d capped=%0d", n_send, n_ns, n_nt, n_cap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
