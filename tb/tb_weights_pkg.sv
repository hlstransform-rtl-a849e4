// tb_weights_pkg: synthetic Llama 2 weights for the testbenches.
//
// No trained checkpoint is needed to check the datapath, so every weight is a
// hash of its coordinates: int8 codes are uniform in [-127, 127], group scales
// are (0.75 + 0.5u) / (73 sqrt(n)) so a row has roughly unit gain, and RMSNorm
// weights are 0.8 + 0.4u (u a hash-derived number in [0, 1)). beat() returns
// the 512-bit memory beat at a beat address of the weight image, following the
// layout of llama_pkg, so a memory model can serve the image without storing it.
package tb_weights_pkg;
  import fp32_pkg::*;
  import llama_pkg::*;

  typedef struct {
    int dim, hidden, n_layers, n_heads, n_kv_heads, vocab;
  } cfg_t;

  function automatic int kv_dim(input cfg_t c);
    return c.dim * c.n_kv_heads / c.n_heads;
  endfunction

  function automatic logic [31:0] mix(input logic [31:0] a, input logic [31:0] b,
                                      input logic [31:0] c, input logic [31:0] d);
    logic [31:0] h;
    h = a * 32'h9e37_79b1 ^ b * 32'h85eb_ca6b ^ c * 32'hc2b2_ae35 ^ d * 32'h27d4_eb2f;
    h = h ^ (h >> 15);
    h = h * 32'h2c1b_3c6d;
    h = h ^ (h >> 12);
    h = h * 32'h297a_2d39;
    return h ^ (h >> 15);
  endfunction

  function automatic real unit(input logic [31:0] h);
    return real'(h[23:0]) / 16777216.0;
  endfunction

  // int8 code of matrix t (layer l), row r, column c
  function automatic logic signed [7:0] wq(input tensor_e t, input int l, input int r, input int c);
    logic [31:0] h;
    h = mix(32'(t), 32'(l), 32'(r), 32'(c));
    return 8'(int'(h % 255) - 127);
  endfunction

  // fp32 scale of group g of row r, the row having n columns
  function automatic fp32_t ws(input tensor_e t, input int l, input int r, input int g, input int n);
    return real_to_fp((0.75 + 0.5 * unit(mix(32'(t) + 100, 32'(l), 32'(r), 32'(g))))
                      / (73.0 * $sqrt(real'(n))));
  endfunction

  function automatic fp32_t rmsw(input tensor_e t, input int l, input int i);
    return real_to_fp(0.8 + 0.4 * unit(mix(32'(t) + 200, 32'(l), 32'(i), 0)));
  endfunction

  function automatic int mat_rows(input cfg_t c, input tensor_e t);
    case (t)
      T_EMB: return c.vocab;
      T_WK, T_WV: return kv_dim(c);
      T_W1, T_W3: return c.hidden;
      default: return c.dim;
    endcase
  endfunction

  function automatic int mat_cols(input cfg_t c, input tensor_e t);
    return (t == T_W2) ? c.hidden : c.dim;
  endfunction

  function automatic int base(input cfg_t c, input tensor_e t, input int l);
    return tensor_base(t, l, c.dim, c.hidden, kv_dim(c), c.vocab, c.n_layers);
  endfunction

  // beat of a quantised matrix: row r, beat b within the row
  function automatic beat_t mat_beat(input cfg_t c, input tensor_e t, input int l, input int r, input int b);
    beat_t bt;
    int    n, sb;
    n  = mat_cols(c, t);
    sb = rs_scale(n);
    bt = '0;
    if (b < sb) begin
      for (int j = 0; j < 16; j++)
        if (b * 16 + j < n / GS) bt[32*j +: 32] = ws(t, l, r, b * 16 + j, n);
    end else begin
      for (int k = 0; k < GS; k++) bt[8*k +: 8] = wq(t, l, r, (b - sb) * GS + k);
    end
    return bt;
  endfunction

  function automatic beat_t vec_beat(input tensor_e t, input int l, input int b, input int n);
    beat_t bt;
    bt = '0;
    for (int j = 0; j < 16; j++)
      if (b * 16 + j < n) bt[32*j +: 32] = rmsw(t, l, b * 16 + j);
    return bt;
  endfunction

  // the beat at address a of the whole weight image
  function automatic beat_t beat(input cfg_t c, input int a);
    tensor_e t;
    int      off, rb;
    if (a >= base(c, T_RMS_FINAL, 0)) return vec_beat(T_RMS_FINAL, 0, a - base(c, T_RMS_FINAL, 0), c.dim);
    if (a < base(c, T_RMS_ATT, 0)) begin
      rb = row_beats(c.dim);
      return mat_beat(c, T_EMB, 0, a / rb, a % rb);
    end
    for (int l = 0; l < c.n_layers; l++) begin
      if (a >= base(c, T_RMS_ATT, l) && (l == c.n_layers - 1 || a < base(c, T_RMS_ATT, l + 1))) begin
        for (int ti = int'(T_W3); ti >= int'(T_RMS_ATT); ti--) begin
          t = tensor_e'(ti);
          if (a >= base(c, t, l)) begin
            off = a - base(c, t, l);
            if (t == T_RMS_ATT || t == T_RMS_FFN) return vec_beat(t, l, off, c.dim);
            rb = row_beats(mat_cols(c, t));
            return mat_beat(c, t, l, off / rb, off % rb);
          end
        end
      end
    end
    return '0;
  endfunction
endpackage
