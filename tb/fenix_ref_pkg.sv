// fenix_ref_pkg -- behavioural reference of the model engine's arithmetic,
// for testbenches only.
//
// Holds a copy of the model parameters (weights by lane bank, biases,
// embeddings, per-layer shifts), fills them with random values together with
// the list of parameter-port writes that load the same values into the
// hardware, and computes the class of a feature vector directly from the
// layer equations (convolution with zero padding, fully connected, a ReLU
// recurrent cell, INT8 requantisation, argmax). It shares nothing with the
// RTL except the parameter address map and the model dimensions.
package fenix_ref_pkg;
  import fenix_pkg::*;

  int wmem [16][512];
  int bmem [128];
  int emem [(LEN_BINS + IPD_BINS) * EMB_DIM];
  int shv  [MAX_LAYERS];

  // parameter-port writes that reproduce the arrays above
  int unsigned prm_addr_q [$];
  int unsigned prm_data_q [$];

  function automatic int tiles(int n, int lanes);
    return (n + lanes - 1) / lanes;
  endfunction

  function automatic int srnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  // Random parameters; small weights keep activations inside INT8 most of the time.
  function automatic void randomize_params(int lanes);
    prm_addr_q.delete();
    prm_data_q.delete();
    for (int b = 0; b < lanes; b++)
      for (int w = 0; w < 512; w++) begin
        wmem[b][w] = srnd(-20, 20);
        prm_addr_q.push_back((0 << 14) | (b << 10) | w);
        prm_data_q.push_back(wmem[b][w] & 32'hFFFF);
      end
    for (int i = 0; i < 128; i++) begin
      bmem[i] = srnd(-300, 300);
      prm_addr_q.push_back((1 << 14) | i);
      prm_data_q.push_back(bmem[i] & 32'hFFFF);
    end
    for (int i = 0; i < (LEN_BINS + IPD_BINS) * EMB_DIM; i++) begin
      emem[i] = srnd(-60, 60);
      prm_addr_q.push_back((2 << 14) | i);
      prm_data_q.push_back(emem[i] & 32'hFFFF);
    end
    for (int l = 0; l < MAX_LAYERS; l++) begin
      shv[l] = srnd(4, 8);
      prm_addr_q.push_back((3 << 14) | l);
      prm_data_q.push_back(shv[l]);
    end
  endfunction

  function automatic int rq(longint acc, int b, int sh, bit relu);
    longint s;
    s = (acc + b) >>> sh;
    if (relu && s < 0) s = 0;
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return int'(s);
  endfunction

  function automatic int wgt(int lanes, int off, int n_in, int row, int j);
    return wmem[row % lanes][off + (row / lanes) * n_in + j];
  endfunction

  function automatic int lbin(int len);
    int b;
    b = len >> LEN_SHIFT;
    return (b > LEN_BINS - 1) ? LEN_BINS - 1 : b;
  endfunction

  function automatic int ibin(int ipd);
    int b;
    b = 0;
    while (ipd > 0) begin
      b++;
      ipd = ipd >> 1;
    end
    return (b > IPD_BINS - 1) ? IPD_BINS - 1 : b;
  endfunction

  // Reference inference: returns the class index.
  function automatic int ref_infer(bit rnn, int nclass, int lanes, feature_t [WIN_SIZE-1:0] f);
    int tok [SEQ_LEN][TOK_DIM];
    int a   [SEQ_LEN][CONV_CH];
    int b2  [SEQ_LEN][CONV_CH];
    int h   [RNN_HID];
    int hn  [RNN_HID];
    int fc1 [FC_HID];
    int lg  [16];
    int off, boff, best, cls;
    longint acc;

    for (int t = 0; t < SEQ_LEN; t++)
      for (int e = 0; e < EMB_DIM; e++) begin
        tok[t][e]           = emem[lbin(int'(f[t].len)) * EMB_DIM + e];
        tok[t][EMB_DIM + e] = emem[(LEN_BINS + ibin(int'(f[t].ipd))) * EMB_DIM + e];
      end

    if (!rnn) begin
      // conv1
      off = 0; boff = 0;
      for (int p = 0; p < SEQ_LEN; p++)
        for (int o = 0; o < CONV_CH; o++) begin
          acc = 0;
          for (int k = 0; k < 3; k++)
            for (int c = 0; c < TOK_DIM; c++)
              if (p + k - 1 >= 0 && p + k - 1 < SEQ_LEN)
                acc += tok[p+k-1][c] * wgt(lanes, off, 3*TOK_DIM, o, k*TOK_DIM + c);
          a[p][o] = rq(acc, bmem[boff + o], shv[0], 1);
        end
      off += tiles(CONV_CH, lanes) * 3 * TOK_DIM; boff += CONV_CH;
      // conv2 and conv3
      for (int l = 1; l <= 2; l++) begin
        for (int p = 0; p < SEQ_LEN; p++)
          for (int o = 0; o < CONV_CH; o++) begin
            acc = 0;
            for (int k = 0; k < 3; k++)
              for (int c = 0; c < CONV_CH; c++)
                if (p + k - 1 >= 0 && p + k - 1 < SEQ_LEN)
                  acc += a[p+k-1][c] * wgt(lanes, off, 3*CONV_CH, o, k*CONV_CH + c);
            b2[p][o] = rq(acc, bmem[boff + o], shv[l], 1);
          end
        a = b2;
        off += tiles(CONV_CH, lanes) * 3 * CONV_CH; boff += CONV_CH;
      end
      // fc1 over the flattened [position][channel] map
      for (int o = 0; o < FC_HID; o++) begin
        acc = 0;
        for (int p = 0; p < SEQ_LEN; p++)
          for (int c = 0; c < CONV_CH; c++)
            acc += a[p][c] * wgt(lanes, off, SEQ_LEN*CONV_CH, o, p*CONV_CH + c);
        fc1[o] = rq(acc, bmem[boff + o], shv[3], 1);
      end
      off += tiles(FC_HID, lanes) * SEQ_LEN * CONV_CH; boff += FC_HID;
      for (int o = 0; o < nclass; o++) begin
        acc = 0;
        for (int i = 0; i < FC_HID; i++) acc += fc1[i] * wgt(lanes, off, FC_HID, o, i);
        lg[o] = rq(acc, bmem[boff + o], shv[4], 0);
      end
    end else begin
      for (int r = 0; r < RNN_HID; r++) h[r] = 0;
      for (int t = 0; t < SEQ_LEN; t++) begin
        for (int o = 0; o < RNN_HID; o++) begin
          acc = 0;
          for (int i = 0; i < TOK_DIM; i++) acc += tok[t][i] * wgt(lanes, 0, TOK_DIM + RNN_HID, o, i);
          for (int i = 0; i < RNN_HID; i++) acc += h[i] * wgt(lanes, 0, TOK_DIM + RNN_HID, o, TOK_DIM + i);
          hn[o] = rq(acc, bmem[o], shv[0], 1);
        end
        h = hn;
      end
      off = tiles(RNN_HID, lanes) * (TOK_DIM + RNN_HID);
      for (int o = 0; o < nclass; o++) begin
        acc = 0;
        for (int i = 0; i < RNN_HID; i++) acc += h[i] * wgt(lanes, off, RNN_HID, o, i);
        lg[o] = rq(acc, bmem[RNN_HID + o], shv[1], 0);
      end
    end

    best = lg[0];
    cls  = 0;
    for (int o = 1; o < nclass; o++)
      if (lg[o] > best) begin
        best = lg[o];
        cls  = o;
      end
    return cls;
  endfunction

  // Cycles from the cycle a vector is taken to the cycle its class is pushed.
  function automatic int ref_latency(bit rnn, int nclass, int lanes);
    int cyc;
    cyc = 1;
    if (!rnn) begin
      cyc += 1 + SEQ_LEN * (tiles(CONV_CH, lanes) * (3*TOK_DIM + lanes + 2) + 1);
      cyc += 2 * (1 + SEQ_LEN * (tiles(CONV_CH, lanes) * (3*CONV_CH + lanes + 2) + 1));
      cyc += 1 + (tiles(FC_HID, lanes) * (SEQ_LEN*CONV_CH + lanes + 2) + 1);
      cyc += 1 + (tiles(nclass, lanes) * (FC_HID + lanes + 2) + 1);
    end else begin
      cyc += 1 + SEQ_LEN * (tiles(RNN_HID, lanes) * (TOK_DIM + RNN_HID + lanes + 2) + 1);
      cyc += 1 + (tiles(nclass, lanes) * (RNN_HID + lanes + 2) + 1);
    end
    return cyc + 1;
  endfunction

  function automatic feature_t [WIN_SIZE-1:0] rand_vec();
    feature_t [WIN_SIZE-1:0] v;
    for (int i = 0; i < WIN_SIZE; i++) begin
      v[i].len = 16'($urandom_range(1600));
      v[i].ipd = 16'($urandom);
      if ($urandom_range(3) == 0) v[i].ipd = 16'($urandom_range(20));
    end
    return v;
  endfunction
endpackage
