// buffer_manager -- per-flow feature ring and feature-header assembly.
//
// Each flow owns a ring of RING_DEPTH (8) features, F1..F8 of the paper,
// stored as one memory row so that the whole ring is read in one access.
// For every regular packet the slot buff_idx (from the flow tracker) holds
// the oldest feature. When the rate limiter decides to export, the header
// is assembled from the ring read in age order starting at buff_idx, then
// the current packet's feature (F9, "metadata") appended last, and the flow
// identifier in front, as in the paper's mirrored-packet header. In every
// case the current feature then overwrites slot buff_idx, so the ring always
// holds the latest 8 features. A row whose flow is new is cleared first (the
// paper does not say what a new flow sees in a reused ring; zeros are this
// design's choice).
//
// Interface: pkt_valid with idx, buff_idx (1..RING_DEPTH), new_flow, feat,
// flow_id and send, all in one cycle. hdr_valid/hdr are registered: the
// header appears one cycle after the packet that caused it.
module buffer_manager
  import fenix_pkg::*;
#(
  parameter int unsigned FLOWS = 4096
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     pkt_valid,
  input  logic [$clog2(FLOWS)-1:0] idx,
  input  logic [3:0]               buff_idx,
  input  logic                     new_flow,
  input  feature_t                 feat,
  input  five_tuple_t              flow_id,
  input  logic                     send,
  output logic                     hdr_valid,
  output feature_hdr_t             hdr
);
  typedef feature_t [RING_DEPTH-1:0] ring_t;

  ring_t        ring_q [FLOWS];
  ring_t        row, row_nx;
  feature_hdr_t hdr_nx;
  logic [2:0]   base;

  always_comb begin
    row  = new_flow ? '0 : ring_q[idx];
    base = 3'(buff_idx - 4'd1);
    hdr_nx.flow_id = flow_id;
    for (int k = 0; k < int'(RING_DEPTH); k++)
      hdr_nx.feat[k] = row[3'(base + 3'(k))];
    hdr_nx.feat[WIN_SIZE-1] = feat;
    row_nx = row;
    row_nx[base] = feat;
  end

  always_ff @(posedge clk) begin
    if (pkt_valid) ring_q[idx] <= row_nx;
    if (pkt_valid && send) hdr <= hdr_nx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hdr_valid <= 1'b0;
    else        hdr_valid <= pkt_valid && send;
  end

  a_idx_range: assert property (@(posedge clk) disable iff (!rst_n)
                                pkt_valid |-> (buff_idx >= 4'd1 && buff_idx <= 4'(RING_DEPTH)));
endmodule
