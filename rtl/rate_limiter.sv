// rate_limiter -- probabilistic token bucket (the paper's Algorithm 1).
//
// One bucket guards the link from the switch to the model engine. For every
// regular packet:
//   gap    = (T_last == 0) ? 0 : now - T_last;  T_last = now
//   bucket = min(bucket + gap, bucket_max)        refill, capped
//   rand   = next LFSR value; prob = P(T_i, C_i) from the probability table
//   send   = rand < prob && bucket >= cost;       if send, bucket -= cost
// The refill of one token per time unit and a cost per feature vector of
// cfg_cost time units sets the export rate V = 1/cost, the paper's
// V = min(F, B/W); the control plane chooses cfg_cost. The cap
// cfg_bucket_max follows the paper's rule that the bucket holds no more
// than the model engine's queue can absorb. The random source is a 16-bit
// Galois LFSR (taps 0xB400) whose low PROB_W bits are compared; the paper
// only says "Random()".
//
// Interface: pkt_valid with now, ti, ci; send is combinational in the same
// cycle; bucket and T_last update at the clock edge. Probability-table write
// port passes through to prob_table. Events report why a packet was not sent.
module rate_limiter #(
  parameter int unsigned TS_W    = 32,
  parameter int unsigned T_BINS  = 16,
  parameter int unsigned C_BINS  = 16,
  parameter int unsigned T_SHIFT = 11,
  parameter int unsigned C_SHIFT = 1,
  parameter int unsigned PROB_W  = 8,
  parameter logic [15:0] SEED    = 16'hACE1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               pkt_valid,
  input  logic [TS_W-1:0]                    now,
  input  logic [TS_W-1:0]                    ti,
  input  logic [15:0]                        ci,
  input  logic [TS_W-1:0]                    cfg_cost,
  input  logic [TS_W-1:0]                    cfg_bucket_max,
  input  logic                               tbl_we,
  input  logic [$clog2(T_BINS*C_BINS)-1:0]   tbl_waddr,
  input  logic [PROB_W:0]                    tbl_wdata,
  output logic                               send,
  output logic [TS_W-1:0]                    bucket,
  output logic                               ev_not_sampled,
  output logic                               ev_no_token,
  output logic                               ev_capped
);
  logic [TS_W-1:0]   t_last, gap, refill;
  logic [TS_W:0]     sum;
  logic [15:0]       lfsr, lfsr_nx;
  logic [PROB_W:0]   prob;
  logic [PROB_W-1:0] rnd;
  logic              sampled;

  prob_table #(
    .TS_W(TS_W), .T_BINS(T_BINS), .C_BINS(C_BINS),
    .T_SHIFT(T_SHIFT), .C_SHIFT(C_SHIFT), .PROB_W(PROB_W)
  ) u_tbl (
    .clk, .we(tbl_we), .waddr(tbl_waddr), .wdata(tbl_wdata),
    .ti, .ci, .prob
  );

  assign lfsr_nx = {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0000);
  assign rnd     = lfsr_nx[PROB_W-1:0];

  always_comb begin
    gap     = (t_last == '0) ? '0 : now - t_last;
    sum     = {1'b0, bucket} + {1'b0, gap};
    refill  = (sum > {1'b0, cfg_bucket_max}) ? cfg_bucket_max : sum[TS_W-1:0];
    sampled = {1'b0, rnd} < prob;
    send    = pkt_valid && sampled && (refill >= cfg_cost);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_last <= '0;
      bucket <= '0;
      lfsr   <= SEED;
    end else if (pkt_valid) begin
      t_last <= now;
      lfsr   <= lfsr_nx;
      bucket <= send ? refill - cfg_cost : refill;
    end
  end

  assign ev_not_sampled = pkt_valid && !sampled;
  assign ev_no_token    = pkt_valid && sampled && (refill < cfg_cost);
  assign ev_capped      = pkt_valid && (sum > {1'b0, cfg_bucket_max});
endmodule
