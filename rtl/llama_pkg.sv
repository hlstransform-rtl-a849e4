// llama_pkg: model dimensions, memory-beat format and weight layout shared by the
// Llama 2 forward-pass kernel and its testbenches.
//
// Model dimensions are those of the 110M-parameter TinyStories Llama 2 model the
// design targets: embedding width 768, 12 layers, 12 query heads, 12 key/value heads
// (head size 64), feed-forward width 2048, vocabulary 32000, context 1024.
//
// Weights live in off-chip memory split over two channels. Both channels are read
// with the same burst addresses over 256-bit AXI4 ports, so every cycle delivers one
// 512-bit "beat" of 64 int8 weights. A beat is also one quantisation group: the
// group size of the Q8_0 scheme is 64 in this design.
//
// Weight layout (all offsets in beats; every tensor starts on a 64-beat boundary):
//   * a quantised matrix of d rows by n columns is stored row after row; a row is
//     rs_scale(n) = ceil(n/64/16) beats holding the n/64 fp32 group scales (16 per
//     beat, scale j in bits 32*(j%16) +: 32), then n/64 beats of int8 weights (weight
//     k of a group in bits 8*k +: 8);
//   * an fp32 vector of n entries is n/16 beats, entry i in bits 32*(i%16) +: 32.
// Order: token embedding (vocab x dim, shared with the classifier), then per layer
// rms_att, wq, wk, wv, wo, rms_ffn, w1, w2, w3, then rms_final.
package llama_pkg;

  localparam int DIM        = 768;
  localparam int HIDDEN     = 2048;
  localparam int N_LAYERS   = 12;
  localparam int N_HEADS    = 12;
  localparam int N_KV_HEADS = 12;
  localparam int SEQ_LEN    = 1024;
  localparam int VOCAB      = 32000;

  localparam int GS         = 64;       // quantisation group = int8 lanes per beat
  localparam int AXI_DW     = 256;      // width of each AXI4 read port
  localparam int N_PORTS    = 2;        // read ports used side by side
  localparam int BEAT_W     = AXI_DW * N_PORTS;
  localparam int ALIGN      = 64;       // tensor alignment in beats

  typedef logic [BEAT_W-1:0] beat_t;

  // Tensor ids used by the layout function.
  typedef enum logic [3:0] {
    T_EMB, T_RMS_ATT, T_WQ, T_WK, T_WV, T_WO, T_RMS_FFN, T_W1, T_W2, T_W3, T_RMS_FINAL
  } tensor_e;

  function automatic int ceil_div(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  function automatic int align_up(input int a);
    return ceil_div(a, ALIGN) * ALIGN;
  endfunction

  // Beats holding the group scales of one quantised row of n columns.
  function automatic int rs_scale(input int n);
    return ceil_div(n / GS, 16);
  endfunction

  // Beats of one quantised row of n columns.
  function automatic int row_beats(input int n);
    return rs_scale(n) + n / GS;
  endfunction

  function automatic int mat_beats(input int d, input int n);
    return align_up(d * row_beats(n));
  endfunction

  function automatic int vec_beats(input int n);
    return align_up(ceil_div(n, 16));
  endfunction

  function automatic int layer_beats(input int dim, input int hidden, input int kvd);
    return vec_beats(dim) + 2 * mat_beats(dim, dim) + 2 * mat_beats(kvd, dim)
         + vec_beats(dim) + 2 * mat_beats(hidden, dim) + mat_beats(dim, hidden);
  endfunction

  // Start beat of tensor t of layer l.
  function automatic int tensor_base(input tensor_e t, input int l, input int dim,
                                         input int hidden, input int kvd, input int vocab,
                                         input int n_layers);
    int b;
    b = mat_beats(vocab, dim);
    if (t == T_EMB) return 0;
    if (t == T_RMS_FINAL) return b + n_layers * layer_beats(dim, hidden, kvd);
    b = b + l * layer_beats(dim, hidden, kvd);
    if (t == T_RMS_ATT) return b;
    b += vec_beats(dim);
    if (t == T_WQ) return b;
    b += mat_beats(dim, dim);
    if (t == T_WK) return b;
    b += mat_beats(kvd, dim);
    if (t == T_WV) return b;
    b += mat_beats(kvd, dim);
    if (t == T_WO) return b;
    b += mat_beats(dim, dim);
    if (t == T_RMS_FFN) return b;
    b += vec_beats(dim);
    if (t == T_W1) return b;
    b += mat_beats(hidden, dim);
    if (t == T_W2) return b;
    b += mat_beats(dim, hidden);
    return b;                                   // T_W3
  endfunction

endpackage
