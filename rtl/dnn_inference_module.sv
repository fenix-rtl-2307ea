// dnn_inference_module -- Input Queue, DNN core and Output Queue.
//
// The module runs in its own clock domain (clk_dnn). Feature vectors come
// in from the vector I/O processor through an asynchronous Input Queue,
// the DNN core turns each into a class, and the classes go back through an
// asynchronous Output Queue, as the paper describes. Because the core
// handles vectors strictly in order, the n-th class out belongs to the n-th
// vector in, which is what lets the vector I/O processor pair classes with
// flow identifiers. Model parameters (weights, biases, embeddings, shifts)
// are written through the parameter port in the clk_dnn domain; the paper
// loads them from the host over a network port.
//
// Interface: io-side write of the input queue (in_push/in_data/in_full) and
// read of the output queue (out_pop/out_cls/out_empty), both on clk_io;
// parameter port and busy on clk_dnn. Timing: a vector pushed at clk_io
// reaches the core after the 2-3 cycle synchroniser delay; the core's own
// latency is given in dnn_core.
module dnn_inference_module
  import fenix_pkg::*;
#(
  parameter model_e      MODEL       = MODEL_CNN,
  parameter int unsigned NUM_CLASSES = 12,
  parameter int unsigned LANES       = 16,
  parameter int unsigned IN_AW       = 3,
  parameter int unsigned OUT_AW      = 3
) (
  input  logic                      clk_io,
  input  logic                      rst_io_n,
  input  logic                      in_push,
  input  feature_t [WIN_SIZE-1:0]   in_data,
  output logic                      in_full,
  input  logic                      out_pop,
  output logic [CLASS_W-1:0]        out_cls,
  output logic                      out_empty,
  input  logic                      clk_dnn,
  input  logic                      rst_dnn_n,
  input  logic                      prm_we,
  input  logic [15:0]               prm_addr,
  input  logic [15:0]               prm_data,
  output logic                      busy
);
  logic                    q_empty, q_pop, o_full, o_push;
  feature_t [WIN_SIZE-1:0] q_data;
  logic [CLASS_W-1:0]      o_cls;

  async_fifo #(.WIDTH(WIN_SIZE*FEAT_W), .ADDR_W(IN_AW)) u_in_q (
    .wclk(clk_io), .wrst_n(rst_io_n), .winc(in_push), .wdata(in_data), .wfull(in_full),
    .rclk(clk_dnn), .rrst_n(rst_dnn_n), .rinc(q_pop), .rdata(q_data), .rempty(q_empty)
  );

  dnn_core #(.MODEL(MODEL), .NUM_CLASSES(NUM_CLASSES), .LANES(LANES)) u_core (
    .clk(clk_dnn), .rst_n(rst_dnn_n),
    .in_valid(!q_empty), .in_feat(q_data), .in_pop(q_pop),
    .out_full(o_full), .out_push(o_push), .out_cls(o_cls),
    .prm_we, .prm_addr, .prm_data, .busy
  );

  async_fifo #(.WIDTH(CLASS_W), .ADDR_W(OUT_AW)) u_out_q (
    .wclk(clk_dnn), .wrst_n(rst_dnn_n), .winc(o_push), .wdata(o_cls), .wfull(o_full),
    .rclk(clk_io), .rrst_n(rst_io_n), .rinc(out_pop), .rdata(out_cls), .rempty(out_empty)
  );
endmodule
