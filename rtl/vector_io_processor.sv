// vector_io_processor -- front end of the model engine.
//
// Slice: each feature packet arriving from the switch is split into its flow
// identifier, pushed into the Flow Identifier Queue, and its feature vector
// F1..F9, pushed into the DNN module's input queue. Both pushes happen
// together or not at all: if either queue is full the packet is dropped and
// counted, so identifiers and vectors stay paired (the switch link cannot be
// back-pressured; the rate limiter is what keeps this rare).
// Join: whenever the identifier queue and the DNN output queue both hold an
// entry, their heads are popped together and leave as one result packet
// (flow identifier + class) towards the switch. Results come back in order,
// so the heads always belong together; this is the paper's mechanism.
//
// Interface: in_valid/in_hdr (no ready); feat_* drives the write side of the
// DNN input queue; res_* the read side of its output queue; out_valid/
// out_ready/out_pkt is the result stream. out_pkt is combinational from the
// queue heads. drop pulses for one cycle per dropped packet.
// Most of out_pkt and all of feat_data are wires from the inputs: slicing
// and joining are pure re-grouping of fields, and the queues that hold the
// data live in sync_fifo and in the DNN module. rst_n is both the flops'
// asynchronous reset and the disable of the handshake assertions, which is
// why lint reports it as used synchronously as well; the hardware uses it
// only as an asynchronous reset.
module vector_io_processor
  import fenix_pkg::*;
#(
  parameter int unsigned FID_DEPTH = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  feature_hdr_t               in_hdr,
  output logic                       feat_push,
  output feature_t [WIN_SIZE-1:0]    feat_data,
  input  logic                       feat_full,
  input  logic                       res_empty,
  input  logic [CLASS_W-1:0]         res_cls,
  output logic                       res_pop,
  output logic                       out_valid,
  input  logic                       out_ready,
  output result_pkt_t                out_pkt,
  output logic                       drop,
  output logic [$clog2(FID_DEPTH):0] fid_level
);
  logic        fid_full, fid_empty, accept;
  five_tuple_t fid_head;

  assign accept    = in_valid && !fid_full && !feat_full;
  assign drop      = in_valid && !accept;
  assign feat_push = accept;
  assign feat_data = in_hdr.feat;

  assign out_valid       = !fid_empty && !res_empty;
  assign out_pkt.flow_id = fid_head;
  assign out_pkt.cls     = res_cls;
  assign res_pop         = out_valid && out_ready;

  sync_fifo #(.WIDTH(TUPLE_W), .DEPTH(FID_DEPTH)) u_fid (
    .clk, .rst_n,
    .wr_en(accept), .wr_data(in_hdr.flow_id), .full(fid_full),
    .rd_en(res_pop), .rd_data(fid_head), .empty(fid_empty),
    .count(fid_level)
  );
endmodule
