// dnn_core -- the neural network datapath of the DNN inference module.
//
// One feature vector (F1..F9, each a packet length and an inter-packet delay)
// becomes one class:
//  1. Embedding. Each feature is turned into a token of TOK_DIM INT8 values
//     by two table lookups: the packet length bin (len >> LEN_SHIFT, clamped)
//     and the log2 bin of the delay, EMB_DIM values each. All 9 tokens are
//     written to the activation scratchpad in the cycle the vector is taken.
//  2. Layers. The layer table of fenix_pkg is walked in order. Every layer is
//     a series of matrix-vector products on the shared systolic array: a
//     convolution is one product per output position over the im2col window
//     (kernel 3, zero 'same' padding); a fully connected layer is one
//     product; the recurrent cell is one product per time step over
//     [x_t ; h_{t-1}], after which the new h replaces the old. Products with
//     more than LANES outputs run as several tiles. Each output is
//     requantised: (acc + bias) >>> shift[layer], ReLU if the layer has one,
//     then saturated to INT8. The per-layer shift is the layer's "decimal
//     position" of the paper's INT8 quantisation.
//  3. Argmax over the last layer's NUM_CLASSES outputs (lowest index wins
//     ties) gives the class.
// The paper gives the model shapes (3 conv + 2 FC; one RNN cell + a dense
// layer), INT8 arithmetic, the embedding-first order and the shared systolic
// array. Widths, the recurrent cell's ReLU form, the scratchpad and the
// one-vector-at-a-time schedule are this design's own; the paper's batching
// and inter-layer FIFOs are not reproduced.
//
// Parameters are loaded through prm_we/prm_addr/prm_data (address map in
// fenix_pkg: weights per bank, biases, embeddings, shifts).
// Interface: in_valid/in_feat/in_pop read a show-ahead queue; out_push/
// out_cls write one (held while out_full). Timing, per inference: out_push
// rises 1 + sum over layers of [1 + npos*(tiles*(n_in + LANES + 2) + 1)] + 1
// cycles after the cycle of in_pop (take, layers, argmax). With the default
// sizes that is 1976 cycles for the CNN and 426 for the RNN (12 and 7
// classes); a new vector is taken the cycle after out_push.
module dnn_core
  import fenix_pkg::*;
#(
  parameter model_e      MODEL       = MODEL_CNN,
  parameter int unsigned NUM_CLASSES = 12,
  parameter int unsigned LANES       = 16,
  parameter int unsigned BANK_DEPTH  = 512,
  parameter int unsigned BIAS_DEPTH  = 128
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  feature_t [WIN_SIZE-1:0]    in_feat,
  output logic                       in_pop,
  input  logic                       out_full,
  output logic                       out_push,
  output logic [CLASS_W-1:0]         out_cls,
  input  logic                       prm_we,
  input  logic [15:0]                prm_addr,
  input  logic [15:0]                prm_data,
  output logic                       busy
);
  localparam int unsigned ACT_N  = 2 * ACT_REGION;
  localparam int unsigned NL     = num_layers(MODEL);
  localparam int unsigned BW     = $clog2(BANK_DEPTH);
  localparam int unsigned EMB_N  = (LEN_BINS + IPD_BINS) * EMB_DIM;
  localparam int unsigned AA     = $clog2(ACT_N);

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_CLEAR, S_FEED, S_DRAIN, S_WRITE, S_NEXT, S_ARGMAX, S_OUT
  } state_e;

  state_e state;

  // ------------------------------------------------------------ memories
  logic signed [7:0]  act   [ACT_N];
  logic signed [7:0]  wbank [LANES][BANK_DEPTH];
  logic signed [15:0] bias  [BIAS_DEPTH];
  logic signed [7:0]  emb   [EMB_N];
  logic [4:0]         shift_q [MAX_LAYERS];

  // ------------------------------------------------------------ sequencing
  logic [2:0]   layer;
  logic [3:0]   pos;
  logic [2:0]   tile;
  logic [9:0]   j;
  logic [1:0]   gk;
  logic [7:0]   gc;
  logic [4:0]   dcnt;
  layer_desc_t  d;

  assign d    = layer_desc(MODEL, 32'(layer), NUM_CLASSES, LANES);
  assign busy = (state != S_IDLE);

  // ------------------------------------------------------------ array
  logic                       sa_clear, sa_valid;
  logic signed [7:0]          sa_x;
  logic [LANES-1:0]           pe_valid;
  logic [LANES-1:0][9:0]      pe_idx;
  logic [LANES-1:0][7:0]      sa_w;
  logic [LANES-1:0][31:0]     sa_acc;

  systolic_array #(.LANES(LANES), .IDX_W(10)) u_sa (
    .clk, .rst_n, .clear(sa_clear), .in_valid(sa_valid), .in_x(sa_x),
    .in_idx(j), .pe_valid, .pe_idx, .w(sa_w), .acc(sa_acc)
  );

  // weight fetch for the index each PE holds
  always_comb begin
    for (int i = 0; i < int'(LANES); i++)
      sa_w[i] = wbank[i][BW'(32'(d.w_off) + 32'(tile) * 32'(d.n_in) + 32'(pe_idx[i]))];
  end

  // input gather for element j of the current product
  always_comb begin
    int p;
    sa_x = '0;
    p    = 0;
    case (d.kind)
      L_CONV: begin
        p = int'(pos) + int'(gk) - 1;
        if (p >= 0 && p < int'(d.npos))
          sa_x = act[AA'(32'(d.src) + p * 32'(d.cin) + 32'(gc))];
      end
      L_FC:  sa_x = act[AA'(d.src + j)];
      default: begin  // L_RNN
        if (j < 10'(d.cin)) sa_x = act[AA'(32'(d.src) + 32'(pos) * 32'(d.cin) + 32'(j))];
        else                sa_x = act[AA'(d.dst + j - 10'(d.cin))];
      end
    endcase
  end

  assign sa_clear = (state == S_CLEAR);
  assign sa_valid = (state == S_FEED);

  // ------------------------------------------------------------ helpers
  function automatic logic signed [7:0] requant(logic [31:0] acc, logic signed [15:0] b,
                                                logic [4:0] sh, logic relu);
    logic signed [31:0] s;
    s = ($signed(acc) + 32'(b)) >>> sh;
    if (relu && s < 0) s = 0;
    if (s > 127)       return 8'sd127;
    else if (s < -128) return -8'sd128;
    else               return s[7:0];
  endfunction

  function automatic int unsigned ipd_bin(logic [15:0] v);
    int unsigned b;
    b = 0;
    for (int i = 0; i < 16; i++) if (v[i]) b = i + 1;
    return (b > IPD_BINS - 1) ? IPD_BINS - 1 : b;
  endfunction

  function automatic int unsigned len_bin(logic [15:0] v);
    int unsigned b;
    b = 32'(v >> LEN_SHIFT);
    return (b > LEN_BINS - 1) ? LEN_BINS - 1 : b;
  endfunction

  // argmax over the final layer
  logic [CLASS_W-1:0] amax;
  always_comb begin
    logic signed [7:0] best;
    best = act[AA'(d.dst)];
    amax = '0;
    for (int r = 1; r < int'(NUM_CLASSES); r++) begin
      if (act[AA'(d.dst + 10'(r))] > best) begin
        best = act[AA'(d.dst + 10'(r))];
        amax = CLASS_W'(r);
      end
    end
  end

  assign in_pop   = (state == S_IDLE) && in_valid;
  assign out_push = (state == S_OUT) && !out_full;

  // ------------------------------------------------------------ parameter load
  always_ff @(posedge clk) begin
    if (prm_we) begin
      case (prm_addr[15:14])
        PREG_WEIGHT: wbank[prm_addr[13:10]][BW'(prm_addr[9:0])] <= prm_data[7:0];
        PREG_BIAS:   bias[$clog2(BIAS_DEPTH)'(prm_addr[9:0])]   <= prm_data;
        PREG_EMB:    emb[$clog2(EMB_N)'(prm_addr[9:0])]          <= prm_data[7:0];
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------ control + scratchpad
  always_ff @(posedge clk) begin
    case (state)
      S_IDLE: if (in_valid) begin
        for (int t = 0; t < int'(SEQ_LEN); t++) begin
          for (int e = 0; e < int'(EMB_DIM); e++) begin
            act[t*TOK_DIM + e]           <= emb[len_bin(in_feat[t].len) * EMB_DIM + e];
            act[t*TOK_DIM + EMB_DIM + e] <= emb[(LEN_BINS + ipd_bin(in_feat[t].ipd)) * EMB_DIM + e];
          end
        end
      end
      S_INIT: if (d.kind == L_RNN)
        for (int r = 0; r < int'(RNN_HID); r++) act[AA'(d.dst + 10'(r))] <= '0;
      S_WRITE: begin
        for (int i = 0; i < int'(LANES); i++) begin
          int unsigned row;
          logic [AA-1:0] a;
          row = 32'(tile) * LANES + i;
          case (d.kind)
            L_CONV:  a = AA'(32'(d.dst) + 32'(pos) * 32'(d.n_out) + row);
            L_FC:    a = AA'(32'(d.dst) + row);
            default: a = AA'(32'(d.dst) + RNN_HID + row);
          endcase
          if (row < 32'(d.n_out))
            act[a] <= requant(sa_acc[i], bias[$clog2(BIAS_DEPTH)'(32'(d.b_off) + row)],
                                   shift_q[layer], d.relu);
        end
      end
      S_NEXT: if (d.kind == L_RNN)
        for (int r = 0; r < int'(RNN_HID); r++)
          act[AA'(d.dst + 10'(r))] <= act[AA'(d.dst + 10'(RNN_HID) + 10'(r))];
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      layer   <= '0;
      pos     <= '0;
      tile    <= '0;
      j       <= '0;
      gk      <= '0;
      gc      <= '0;
      dcnt    <= '0;
      out_cls <= '0;
      for (int l = 0; l < int'(MAX_LAYERS); l++) shift_q[l] <= 5'd7;
    end else begin
      if (prm_we && prm_addr[15:14] == PREG_SHIFT && prm_addr[3:0] < 4'(MAX_LAYERS))
        shift_q[prm_addr[2:0]] <= prm_data[4:0];
      case (state)
        S_IDLE: if (in_valid) begin
          layer <= '0;
          pos   <= '0;
          tile  <= '0;
          state <= S_INIT;
        end
        S_INIT:  state <= S_CLEAR;
        S_CLEAR: begin
          j     <= '0;
          gk    <= '0;
          gc    <= '0;
          state <= S_FEED;
        end
        S_FEED: begin
          j <= j + 10'd1;
          if (gc == d.cin - 8'd1) begin
            gc <= '0;
            gk <= gk + 2'd1;
          end else begin
            gc <= gc + 8'd1;
          end
          if (j == d.n_in - 10'd1) begin
            dcnt  <= '0;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 5'd1;
          if (dcnt == 5'(LANES - 1)) state <= S_WRITE;
        end
        S_WRITE: begin
          if ((32'(tile) + 1) * LANES < 32'(d.n_out)) begin
            tile  <= tile + 3'd1;
            state <= S_CLEAR;
          end else begin
            tile  <= '0;
            state <= S_NEXT;
          end
        end
        S_NEXT: begin
          if (pos + 4'd1 < d.npos) begin
            pos   <= pos + 4'd1;
            state <= S_CLEAR;
          end else if (32'(layer) + 1 < NL) begin
            layer <= layer + 3'd1;
            pos   <= '0;
            state <= S_INIT;
          end else begin
            state <= S_ARGMAX;
          end
        end
        S_ARGMAX: begin
          out_cls <= amax;
          state   <= S_OUT;
        end
        S_OUT: if (!out_full) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // the drain phase lets the last element leave the last PE before results are read
  a_drained: assert property (@(posedge clk) disable iff (!rst_n)
                              (state == S_WRITE) |-> (pe_valid == '0));
endmodule
