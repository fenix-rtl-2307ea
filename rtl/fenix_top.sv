// fenix_top -- switch data engine plus FPGA model engine, end to end.
//
// Data engine (one packet per clk cycle, all lookups and the read-modify-
// write of per-flow state in the same cycle):
//   flow_tracker  -> T_i, C_i, IPD, buff_idx, stored class
//   rate_limiter  -> send? (probabilistic token bucket)
//   buffer_manager-> feature header (flow id + F1..F9) when send
//   decision_tree -> packet-level class for flows with no class yet
// The forwarding verdict of every regular packet leaves on fwd_* one cycle
// later: the stored class if the flow has one, otherwise the tree's class
// (fwd_by_dt = 1).
// Model engine: vector_io_processor slices each feature header into the flow
// identifier queue and the DNN module's input queue, and joins results with
// identifiers. The DNN inference module runs on clk_dnn.
// Result packets go back into the flow tracker as inference packets. They
// take priority at the flow tracker's single port, so pkt_ready drops for
// the cycle a result enters (the ingress stalls one cycle).
// The switch pipeline and the vector I/O processor share clk; the link
// between the two chips is not modelled. Time is a free-running count of
// clk cycles starting at 1 after reset (so T_last = 0 still means "no packet
// yet", as in the paper's Algorithm 1).
//
// Control-plane ports: window_reset (end of T_w), flow_cnt/pkt_cnt, the
// probability table, the decision tree, the token cost and bucket cap.
// Model parameters load through prm_* on clk_dnn. ev_* pulse once per event
// so that a testbench or a counter block can observe each mechanism.
module fenix_top
  import fenix_pkg::*;
#(
  parameter int unsigned FLOWS       = 4096,
  parameter model_e      MODEL       = MODEL_CNN,
  parameter int unsigned NUM_CLASSES = 12,
  parameter int unsigned LANES       = 16,
  parameter int unsigned T_BINS      = 16,
  parameter int unsigned C_BINS      = 16,
  parameter int unsigned T_SHIFT     = 11,
  parameter int unsigned C_SHIFT     = 1,
  parameter int unsigned DT_DEPTH    = 4,
  parameter int unsigned FID_DEPTH   = 32,
  parameter int unsigned IN_AW       = 3,
  parameter int unsigned OUT_AW      = 3
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               clk_dnn,
  input  logic                               rst_dnn_n,
  // ingress packets
  input  logic                               pkt_valid,
  output logic                               pkt_ready,
  input  five_tuple_t                        pkt_tuple,
  input  logic [15:0]                        pkt_len,
  // forwarding verdict
  output logic                               fwd_valid,
  output five_tuple_t                        fwd_tuple,
  output logic [CLASS_W-1:0]                 fwd_cls,
  output logic                               fwd_by_dt,
  // control plane
  input  logic                               window_reset,
  output logic [31:0]                        flow_cnt,
  output logic [31:0]                        pkt_cnt,
  input  logic                               prob_we,
  input  logic [$clog2(T_BINS*C_BINS)-1:0]   prob_waddr,
  input  logic [8:0]                         prob_wdata,
  input  logic                               dt_we,
  input  logic [DT_DEPTH:0]                  dt_addr,
  input  logic [18:0]                        dt_data,
  input  logic [31:0]                        cfg_cost,
  input  logic [31:0]                        cfg_bucket_max,
  // model parameters (clk_dnn)
  input  logic                               prm_we,
  input  logic [15:0]                        prm_addr,
  input  logic [15:0]                        prm_data,
  // observation
  output logic                               ev_new_flow,
  output logic                               ev_collision,
  output logic                               ev_send,
  output logic                               ev_not_sampled,
  output logic                               ev_no_token,
  output logic                               ev_capped,
  output logic                               ev_infer_update,
  output logic                               ev_ring_wrap,
  output logic                               ev_stall,
  output logic                               ev_drop,
  output logic                               ev_result,
  output logic                               dnn_busy,
  output logic [31:0]                        bucket,      // token bucket level
  output logic [$clog2(FID_DEPTH):0]         fid_level    // flow identifier queue fill
);
  localparam int unsigned IW = $clog2(FLOWS);

  logic [31:0] now;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= 32'd1;
    else        now <= now + 32'd1;
  end

  // ------------------------------------------------ port arbitration
  result_pkt_t res_pkt;
  logic        res_valid, res_ready;
  logic        ft_valid, ft_infer;
  five_tuple_t ft_tuple;
  logic        reg_pkt;

  assign res_ready = 1'b1;
  assign pkt_ready = !res_valid;
  assign ft_infer  = res_valid;
  assign ft_valid  = res_valid || pkt_valid;
  assign ft_tuple  = res_valid ? res_pkt.flow_id : pkt_tuple;
  assign reg_pkt   = pkt_valid && !res_valid;
  assign ev_stall  = pkt_valid && res_valid;
  assign ev_result = res_valid;

  // ------------------------------------------------ flow tracker
  logic [IW-1:0]      idx;
  logic               is_new, has_class, send;
  logic [31:0]        ti;
  logic [15:0]        ci, ipd;
  logic [3:0]         buff_idx;
  logic [CLASS_W-1:0] ft_cls, dt_cls;

  flow_tracker #(.FLOWS(FLOWS), .TS_W(32)) u_ft (
    .clk, .rst_n,
    .in_valid(ft_valid), .in_is_infer(ft_infer), .in_tuple(ft_tuple),
    .in_cls(res_pkt.cls), .now,
    .window_reset, .flow_cnt, .pkt_cnt,
    .idx, .is_new, .ti, .ci, .ipd, .buff_idx, .has_class, .cls(ft_cls),
    .send,
    .ev_new_flow, .ev_collision, .ev_infer_update, .ev_ring_wrap
  );

  // ------------------------------------------------ rate limiter
  rate_limiter #(
    .TS_W(32), .T_BINS(T_BINS), .C_BINS(C_BINS),
    .T_SHIFT(T_SHIFT), .C_SHIFT(C_SHIFT), .PROB_W(8)
  ) u_rl (
    .clk, .rst_n, .pkt_valid(reg_pkt), .now, .ti, .ci,
    .cfg_cost, .cfg_bucket_max,
    .tbl_we(prob_we), .tbl_waddr(prob_waddr), .tbl_wdata(prob_wdata),
    .send, .bucket, .ev_not_sampled, .ev_no_token, .ev_capped
  );
  assign ev_send = send;

  // ------------------------------------------------ buffer manager
  feature_t     cur_feat;
  logic         hdr_valid;
  feature_hdr_t hdr;

  assign cur_feat.len = pkt_len;
  assign cur_feat.ipd = ipd;

  buffer_manager #(.FLOWS(FLOWS)) u_bm (
    .clk, .rst_n, .pkt_valid(reg_pkt), .idx, .buff_idx, .new_flow(is_new),
    .feat(cur_feat), .flow_id(pkt_tuple), .send,
    .hdr_valid, .hdr
  );

  // ------------------------------------------------ packet-level tree
  decision_tree #(.DEPTH(DT_DEPTH)) u_dt (
    .clk, .rst_n, .we(dt_we), .addr(dt_addr), .data(dt_data),
    .f_len(pkt_len), .f_ipd(ipd), .f_tuple(pkt_tuple), .cls(dt_cls)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fwd_valid <= 1'b0;
      fwd_tuple <= '0;
      fwd_cls   <= '0;
      fwd_by_dt <= 1'b0;
    end else begin
      fwd_valid <= reg_pkt;
      if (reg_pkt) begin
        fwd_tuple <= pkt_tuple;
        fwd_cls   <= has_class ? ft_cls : dt_cls;
        fwd_by_dt <= !has_class;
      end
    end
  end

  // ------------------------------------------------ model engine
  logic                    feat_push, feat_full, res_empty, res_pop;
  feature_t [WIN_SIZE-1:0] feat_data;
  logic [CLASS_W-1:0]      res_cls;

  vector_io_processor #(.FID_DEPTH(FID_DEPTH)) u_vio (
    .clk, .rst_n,
    .in_valid(hdr_valid), .in_hdr(hdr),
    .feat_push, .feat_data, .feat_full,
    .res_empty, .res_cls, .res_pop,
    .out_valid(res_valid), .out_ready(res_ready), .out_pkt(res_pkt),
    .drop(ev_drop), .fid_level
  );

  dnn_inference_module #(
    .MODEL(MODEL), .NUM_CLASSES(NUM_CLASSES), .LANES(LANES),
    .IN_AW(IN_AW), .OUT_AW(OUT_AW)
  ) u_dnn (
    .clk_io(clk), .rst_io_n(rst_n),
    .in_push(feat_push), .in_data(feat_data), .in_full(feat_full),
    .out_pop(res_pop), .out_cls(res_cls), .out_empty(res_empty),
    .clk_dnn, .rst_dnn_n,
    .prm_we, .prm_addr, .prm_data, .busy(dnn_busy)
  );
endmodule
