// Double-precision reference of one Llama 2 forward pass with int8 (Q8_0) weights
// and Q8_0-quantised activations, for the end-to-end testbenches. The including
// module defines DIM, HIDDEN, NL, NH, NKV, SEQ, VOCAB and a tb_weights_pkg::cfg_t
// named cfg. The weights are the synthetic ones of tb_weights_pkg; the step order
// is the one the kernel implements (see llama_forward).
  localparam int RHS  = DIM / NH;
  localparam int RKVD = DIM * NKV / NH;
  real ref_kc [NL][SEQ][RKVD];
  real ref_vc [NL][SEQ][RKVD];
  real ref_logits [VOCAB];

  task automatic ref_quant(input real v [], input int n, output int qv [], output real sv []);
    real m;
    qv = new[n];
    sv = new[n / 64];
    for (int g = 0; g < n / 64; g++) begin
      m = 0.0;
      for (int i = 0; i < 64; i++) if ((v[g*64+i] < 0 ? -v[g*64+i] : v[g*64+i]) > m)
        m = v[g*64+i] < 0 ? -v[g*64+i] : v[g*64+i];
      sv[g] = m / 127.0;
      for (int i = 0; i < 64; i++) begin
        real e;
        e = (m == 0.0) ? 0.0 : v[g*64+i] * 127.0 / m;
        qv[g*64+i] = (e >= 0.0) ? $rtoi(e + 0.5) : -$rtoi(-e + 0.5);
      end
    end
  endtask

  task automatic ref_matmul(input llama_pkg::tensor_e t, input int l, input real v [],
                            input int rows, input int cols, output real o []);
    int  qv [];
    real sv [];
    longint dot;
    ref_quant(v, cols, qv, sv);
    o = new[rows];
    for (int r = 0; r < rows; r++) begin
      o[r] = 0.0;
      for (int g = 0; g < cols / 64; g++) begin
        dot = 0;
        for (int k = 0; k < 64; k++)
          dot += longint'(tb_weights_pkg::wq(t, l, r, g*64+k)) * longint'(qv[g*64+k]);
        o[r] += real'(dot) * fp32_pkg::fp_to_real(tb_weights_pkg::ws(t, l, r, g, cols)) * sv[g];
      end
    end
  endtask

  task automatic ref_rmsnorm(input real v [], input llama_pkg::tensor_e t, input int l,
                             output real o []);
    real ss;
    ss = 0.0;
    foreach (v[i]) ss += v[i] * v[i];
    ss = 1.0 / $sqrt(ss / DIM + 1e-5);
    o = new[DIM];
    foreach (v[i]) o[i] = fp32_pkg::fp_to_real(tb_weights_pkg::rmsw(t, l, i)) * v[i] * ss;
  endtask

  task automatic ref_forward(input int token, input int pos);
    real x [], xb [], q [], k [], v [], hb [], hb2 [], o [];
    real a, c, s, v0, v1, m, sum;
    real sc [];
    int  rb;
    x = new[DIM];
    for (int g = 0; g < DIM / 64; g++)
      for (int i = 0; i < 64; i++)
        x[g*64+i] = real'(tb_weights_pkg::wq(llama_pkg::T_EMB, 0, token, g*64+i))
                  * fp32_pkg::fp_to_real(tb_weights_pkg::ws(llama_pkg::T_EMB, 0, token, g, DIM));
    for (int l = 0; l < NL; l++) begin
      ref_rmsnorm(x, llama_pkg::T_RMS_ATT, l, xb);
      ref_matmul(llama_pkg::T_WQ, l, xb, DIM, DIM, q);
      ref_matmul(llama_pkg::T_WK, l, xb, RKVD, DIM, k);
      ref_matmul(llama_pkg::T_WV, l, xb, RKVD, DIM, v);
      for (int i = 0; i < DIM; i += 2) begin
        a = real'(pos) * $pow(10000.0, -real'(i % RHS) / RHS);
        c = $cos(a);
        s = $sin(a);
        v0 = q[i]; v1 = q[i+1];
        q[i] = v0 * c - v1 * s; q[i+1] = v0 * s + v1 * c;
        if (i < RKVD) begin
          v0 = k[i]; v1 = k[i+1];
          k[i] = v0 * c - v1 * s; k[i+1] = v0 * s + v1 * c;
        end
      end
      for (int i = 0; i < RKVD; i++) begin
        ref_kc[l][pos][i] = k[i];
        ref_vc[l][pos][i] = v[i];
      end
      xb = new[DIM];
      sc = new[pos + 1];
      for (int h = 0; h < NH; h++) begin
        int kh;
        kh = h / (NH / NKV);
        m = -1e300;
        for (int t = 0; t <= pos; t++) begin
          sc[t] = 0.0;
          for (int j = 0; j < RHS; j++) sc[t] += q[h*RHS+j] * ref_kc[l][t][kh*RHS+j];
          sc[t] = sc[t] / $sqrt(real'(RHS));
          if (sc[t] > m) m = sc[t];
        end
        sum = 0.0;
        for (int t = 0; t <= pos; t++) begin sc[t] = $exp(sc[t] - m); sum += sc[t]; end
        for (int j = 0; j < RHS; j++) begin
          xb[h*RHS+j] = 0.0;
          for (int t = 0; t <= pos; t++) xb[h*RHS+j] += sc[t] / sum * ref_vc[l][t][kh*RHS+j];
        end
      end
      ref_matmul(llama_pkg::T_WO, l, xb, DIM, DIM, o);
      foreach (x[i]) x[i] += o[i];
      ref_rmsnorm(x, llama_pkg::T_RMS_FFN, l, xb);
      ref_matmul(llama_pkg::T_W1, l, xb, HIDDEN, DIM, hb);
      ref_matmul(llama_pkg::T_W3, l, xb, HIDDEN, DIM, hb2);
      foreach (hb[i]) hb[i] = hb[i] / (1.0 + $exp(-hb[i])) * hb2[i];
      ref_matmul(llama_pkg::T_W2, l, hb, DIM, HIDDEN, o);
      foreach (x[i]) x[i] += o[i];
    end
    ref_rmsnorm(x, llama_pkg::T_RMS_FINAL, 0, xb);
    ref_matmul(llama_pkg::T_EMB, 0, xb, VOCAB, DIM, o);
    foreach (o[i]) ref_logits[i] = o[i];
  endtask
