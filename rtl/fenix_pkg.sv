// fenix_pkg -- types and constants shared by the data engine (switch side)
// and the model engine (FPGA side).
//
// Packet-facing types: the five-tuple flow identifier, the per-packet
// feature (packet length and inter-packet delay), the mirrored feature
// header (flow identifier followed by F1..F9, oldest first) and the result
// packet that carries a class back to the switch.
//
// Model-facing types: the layer descriptor table that the DNN core walks.
// Every layer of both supported models (a CNN of 3 convolution layers and 2
// fully connected layers, and an RNN of one recurrent cell and one dense
// layer) is a matrix-vector product executed on the same systolic array; the
// table gives each layer's input length, output length, number of positions
// (convolution positions or recurrent time steps), where it reads and writes
// the activation scratchpad and where its weights and biases live.
// The two model shapes and the window of 9 features follow the paper; channel
// counts, embedding widths and the memory layout are this design's choices.
// Some constants (the parameter address map, the bin counts, FEAT_W,
// RING_DEPTH) are not read by every module that imports the package; they
// are here so that the RTL and the testbenches share one definition.
package fenix_pkg;

  // ---------------------------------------------------------------- packets
  typedef struct packed {
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [15:0] src_port;
    logic [15:0] dst_port;
    logic [7:0]  proto;
  } five_tuple_t;

  localparam int unsigned TUPLE_W    = $bits(five_tuple_t);  // 104
  localparam int unsigned WIN_SIZE   = 9;                     // F1..F9
  localparam int unsigned RING_DEPTH = WIN_SIZE - 1;          // F1..F8 kept per flow
  localparam int unsigned CLASS_W    = 8;

  // One per-packet feature: inter-packet delay and packet length.
  typedef struct packed {
    logic [15:0] ipd;
    logic [15:0] len;
  } feature_t;

  localparam int unsigned FEAT_W = $bits(feature_t);          // 32

  // Feature header of a mirrored packet: feat[0] = F1 (oldest) ... feat[8] = F9.
  typedef struct packed {
    five_tuple_t                    flow_id;
    feature_t [WIN_SIZE-1:0]        feat;
  } feature_hdr_t;

  // Inference result packet sent from the model engine back to the switch.
  typedef struct packed {
    five_tuple_t          flow_id;
    logic [CLASS_W-1:0]   cls;
  } result_pkt_t;

  // CRC-32 (polynomial 0x04C11DB7, init all ones, no reflection) over the
  // 104-bit five-tuple, MSB first: the flow hash used by the flow tracker.
  function automatic logic [31:0] flow_hash(five_tuple_t t);
    logic [31:0]        c;
    logic [TUPLE_W-1:0] d;
    d = t;
    c = 32'hFFFF_FFFF;
    for (int i = TUPLE_W - 1; i >= 0; i--) begin
      if (c[31] ^ d[i]) c = {c[30:0], 1'b0} ^ 32'h04C1_1DB7;
      else              c = {c[30:0], 1'b0};
    end
    return c;
  endfunction

  // ------------------------------------------------------------------ model
  localparam int unsigned SEQ_LEN  = WIN_SIZE;   // tokens per inference
  localparam int unsigned EMB_DIM  = 4;          // embedding width per feature
  localparam int unsigned TOK_DIM  = 2 * EMB_DIM;
  localparam int unsigned LEN_BINS = 64;         // packet length bins (len >> LEN_SHIFT)
  localparam int unsigned LEN_SHIFT = 5;
  localparam int unsigned IPD_BINS = 16;         // log2 bins of the inter-packet delay
  localparam int unsigned CONV_CH  = 16;         // channels of every conv layer
  localparam int unsigned CONV_K   = 3;          // kernel width, 'same' padding
  localparam int unsigned FC_HID   = 32;         // hidden width of the CNN's first FC layer
  localparam int unsigned RNN_HID  = 16;         // hidden state of the RNN cell
  localparam int unsigned ACT_REGION = 256;      // scratchpad holds two regions
  localparam int unsigned MAX_LAYERS = 5;

  typedef enum logic [1:0] {
    L_CONV = 2'd0,
    L_FC   = 2'd1,
    L_RNN  = 2'd2
  } layer_kind_e;

  typedef enum logic {
    MODEL_CNN = 1'b0,
    MODEL_RNN = 1'b1
  } model_e;

  typedef struct packed {
    layer_kind_e kind;
    logic [9:0]  n_in;    // length of the input vector of one product
    logic [9:0]  n_out;   // rows of the weight matrix
    logic [3:0]  npos;    // positions (conv) or time steps (rnn); 1 for fc
    logic [7:0]  cin;     // input channels (conv) or input width (rnn)
    logic [9:0]  src;     // scratchpad base of the input
    logic [9:0]  dst;     // scratchpad base of the output
    logic [9:0]  w_off;   // word offset inside every weight bank
    logic [9:0]  b_off;   // bias memory offset
    logic        relu;
  } layer_desc_t;

  function automatic int unsigned num_layers(model_e m);
    return (m == MODEL_CNN) ? 5 : 2;
  endfunction

  function automatic int unsigned ceil_div(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

  function automatic layer_desc_t mk_layer(layer_kind_e k, int unsigned n_in,
                                           int unsigned n_out, int unsigned npos,
                                           int unsigned cin, int unsigned src,
                                           int unsigned dst, int unsigned w_off,
                                           int unsigned b_off, logic relu);
    layer_desc_t d;
    d.kind  = k;
    d.n_in  = 10'(n_in);
    d.n_out = 10'(n_out);
    d.npos  = 4'(npos);
    d.cin   = 8'(cin);
    d.src   = 10'(src);
    d.dst   = 10'(dst);
    d.w_off = 10'(w_off);
    d.b_off = 10'(b_off);
    d.relu  = relu;
    return d;
  endfunction

  // Layer table. Weight offsets accumulate ceil(n_out/lanes)*n_in words per bank.
  function automatic layer_desc_t layer_desc(model_e m, int unsigned i,
                                             int unsigned nclass, int unsigned lanes);
    int unsigned c1, c2, c3, f1, f2;
    layer_desc_t d;
    d = '0;
    if (m == MODEL_CNN) begin
      c1 = 0;
      c2 = c1 + ceil_div(CONV_CH, lanes) * CONV_K * TOK_DIM;
      c3 = c2 + ceil_div(CONV_CH, lanes) * CONV_K * CONV_CH;
      f1 = c3 + ceil_div(CONV_CH, lanes) * CONV_K * CONV_CH;
      f2 = f1 + ceil_div(FC_HID, lanes) * SEQ_LEN * CONV_CH;
      case (i)
        0: d = mk_layer(L_CONV, CONV_K*TOK_DIM, CONV_CH, SEQ_LEN, TOK_DIM, 0, ACT_REGION, c1, 0, 1'b1);
        1: d = mk_layer(L_CONV, CONV_K*CONV_CH, CONV_CH, SEQ_LEN, CONV_CH, ACT_REGION, 0, c2, CONV_CH, 1'b1);
        2: d = mk_layer(L_CONV, CONV_K*CONV_CH, CONV_CH, SEQ_LEN, CONV_CH, 0, ACT_REGION, c3, 2*CONV_CH, 1'b1);
        3: d = mk_layer(L_FC, SEQ_LEN*CONV_CH, FC_HID, 1, 0, ACT_REGION, 0, f1, 3*CONV_CH, 1'b1);
        4: d = mk_layer(L_FC, FC_HID, nclass, 1, 0, 0, ACT_REGION, f2, 3*CONV_CH + FC_HID, 1'b0);
        default: d = '0;
      endcase
    end else begin
      case (i)
        // h_t = relu(W [x_t ; h_{t-1}] + b); h lives at dst, the new h at dst+RNN_HID
        0: d = mk_layer(L_RNN, TOK_DIM + RNN_HID, RNN_HID, SEQ_LEN, TOK_DIM, 0, ACT_REGION, 0, 0, 1'b1);
        1: d = mk_layer(L_FC, RNN_HID, nclass, 1, 0, ACT_REGION, 0,
                        ceil_div(RNN_HID, lanes) * (TOK_DIM + RNN_HID), RNN_HID, 1'b0);
        default: d = '0;
      endcase
    end
    return d;
  endfunction

  // Parameter-load address map of the model engine (16-bit address).
  localparam logic [1:0] PREG_WEIGHT = 2'd0;  // [13:10] bank, [9:0] word
  localparam logic [1:0] PREG_BIAS   = 2'd1;  // [9:0] index
  localparam logic [1:0] PREG_EMB    = 2'd2;  // [9:0] index: length table, then ipd table
  localparam logic [1:0] PREG_SHIFT  = 2'd3;  // [3:0] layer

endpackage
