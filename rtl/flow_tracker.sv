// flow_tracker -- the Flow Info Table of the data engine.
//
// Every packet is looked up by a truncated CRC-32 of its five-tuple. The
// table row holds the fields the paper lists (hash, bklog_n, bklog_t, class,
// buff_idx) plus two this design adds: last_t, the flow's last arrival time,
// from which the inter-packet-delay feature is taken, and epoch, which marks
// the counting window in which the flow was last seen.
//
// Regular packet: if the stored hash differs (or the row is empty) the flow
// is new, or a collision evicted the previous owner, and the row is
// re-initialised. A flow seen for the first time in the current window
// increments Flow_cnt; every packet increments Pkt_cnt. The packet's
// T_i = now - bklog_t and C_i = bklog_n + 1 go to the rate limiter; when the
// rate limiter answers send, bklog_n and bklog_t restart from this packet.
// buff_idx (1..RING_DEPTH) is the ring slot this packet's feature goes into;
// it advances per packet and goes back to 1 after RING_DEPTH, which is the
// paper's "resets to 1 when reaching buffer size" (window size 9 = 8 ring
// slots + the current packet).
// Inference packet (a result from the model engine): the row of its flow is
// updated with the class; if the flow has been evicted by a collision since
// its features were mirrored (hash differs) the result is discarded. The
// packet itself is consumed (dropped) here either way.
// window_reset is the control plane's end-of-T_w reset: Flow_cnt and Pkt_cnt
// restart and the epoch advances, which is how "the hash registers are reset"
// is realised without clearing every row.
//
// Timing: one packet per cycle. All lookup outputs are combinational from the
// inputs and the table; the row is written at the clock edge, using the
// same-cycle send decision. The read-modify-write completes in one cycle, so
// back-to-back packets of one flow need no forwarding.
module flow_tracker
  import fenix_pkg::*;
#(
  parameter int unsigned FLOWS = 4096,
  parameter int unsigned TS_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // packet
  input  logic                     in_valid,
  input  logic                     in_is_infer,
  input  five_tuple_t              in_tuple,
  input  logic [CLASS_W-1:0]       in_cls,      // class carried by an inference packet
  input  logic [TS_W-1:0]          now,
  // control plane
  input  logic                     window_reset,
  output logic [31:0]              flow_cnt,
  output logic [31:0]              pkt_cnt,
  // lookup results (regular packets)
  output logic [$clog2(FLOWS)-1:0] idx,
  output logic                     is_new,       // row (re)initialised by this packet
  output logic [TS_W-1:0]          ti,
  output logic [15:0]              ci,
  output logic [15:0]              ipd,
  output logic [3:0]               buff_idx,
  output logic                     has_class,
  output logic [CLASS_W-1:0]       cls,
  // decision of the rate limiter for this packet
  input  logic                     send,
  // events
  output logic                     ev_new_flow,
  output logic                     ev_collision,
  output logic                     ev_infer_update,
  output logic                     ev_ring_wrap
);
  localparam int unsigned IW = $clog2(FLOWS);

  typedef struct packed {
    logic               valid;
    logic [31:0]        hash;
    logic [7:0]         epoch;
    logic [15:0]        bklog_n;
    logic [TS_W-1:0]    bklog_t;
    logic [TS_W-1:0]    last_t;
    logic               cls_valid;
    logic [CLASS_W-1:0] cls;
    logic [3:0]         buff_idx;
  } flow_entry_t;

  flow_entry_t        table_q [FLOWS];
  logic [FLOWS-1:0]   row_valid;     // cleared by reset; table_q itself is not
  logic [7:0]         epoch_q;
  logic [31:0]        h;
  flow_entry_t        e, e_nx;
  logic               match, counted;
  logic [TS_W-1:0]    dt;
  logic [3:0]         slot;
  logic [7:0]         epoch_w;

  assign h     = flow_hash(in_tuple);
  assign idx   = h[IW-1:0];
  assign e     = table_q[idx];
  assign match = row_valid[idx] && e.valid && (e.hash == h);
  assign epoch_w = window_reset ? epoch_q + 8'd1 : epoch_q;

  always_comb begin
    is_new    = !match;
    dt        = now - e.last_t;
    ti        = match ? now - e.bklog_t : '0;
    ci        = match ? e.bklog_n + 16'd1 : 16'd1;
    ipd       = !match ? 16'd0 : (|dt[TS_W-1:16]) ? 16'hFFFF : dt[15:0];
    slot      = match ? e.buff_idx : 4'd1;
    buff_idx  = slot;
    has_class = match && e.cls_valid;
    cls       = e.cls;
    counted   = !match || (e.epoch != epoch_q) || window_reset;

    e_nx = e;
    if (in_is_infer) begin
      // a result for a flow that has since been evicted is discarded
      if (match) begin
        e_nx.cls_valid = 1'b1;
        e_nx.cls       = in_cls;
      end
    end else begin
      e_nx.valid    = 1'b1;
      e_nx.hash     = h;
      e_nx.epoch    = epoch_w;
      e_nx.bklog_n  = send ? 16'd0 : ci;
      e_nx.bklog_t  = (send || !match) ? now : e.bklog_t;
      e_nx.last_t   = now;
      e_nx.buff_idx = (slot == 4'(RING_DEPTH)) ? 4'd1 : slot + 4'd1;
      if (!match) begin
        e_nx.cls_valid = 1'b0;
        e_nx.cls       = '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && (match || !in_is_infer)) table_q[idx] <= e_nx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_valid <= '0;
      epoch_q   <= '0;
      flow_cnt  <= '0;
      pkt_cnt   <= '0;
    end else begin
      if (in_valid && !in_is_infer) row_valid[idx] <= 1'b1;
      if (window_reset) epoch_q <= epoch_q + 8'd1;
      if (window_reset) begin
        flow_cnt <= (in_valid && !in_is_infer && counted) ? 32'd1 : 32'd0;
        pkt_cnt  <= (in_valid && !in_is_infer) ? 32'd1 : 32'd0;
      end else if (in_valid && !in_is_infer) begin
        flow_cnt <= flow_cnt + (counted ? 32'd1 : 32'd0);
        pkt_cnt  <= pkt_cnt + 32'd1;
      end
    end
  end

  assign ev_new_flow     = in_valid && !in_is_infer && !match;
  assign ev_collision    = in_valid && !in_is_infer && !match && row_valid[idx] && e.valid;
  assign ev_infer_update = in_valid && in_is_infer && match;
  assign ev_ring_wrap    = in_valid && !in_is_infer && (slot == 4'(RING_DEPTH));
endmodule
