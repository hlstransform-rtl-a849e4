// llama_forward: the forward-pass kernel. Given a token and its position, it runs
// one forward pass of the Llama 2 transformer and writes the vocabulary logits to
// the shared output buffer, where the host samples the next token.
//
// Dataflow of one call (all vectors in fp32 registers, fully partitioned):
//   x = dequant(embedding[token])
//   for each layer l:
//     xb = rmsnorm(x, rms_att[l]);       q,k,v = Wq,Wk,Wv * quant(xb)
//     q,k = rope(q, k, pos);             cache[l][pos] = k, v
//     xb = attention(q, cache[l][0..pos]);  x = x + Wo * quant(xb)
//     xb = rmsnorm(x, rms_ffn[l]);       hb = W1 * quant(xb);  hb2 = W3 * quant(xb)
//     hb = swiglu(hb, hb2);              x = x + W2 * quant(hb)
//   x = rmsnorm(x, rms_final);  logits = Wcls * quant(x)   (Wcls = embedding table)
// Every weight matrix is int8 with per-group fp32 scales (Q8_0) and streams from
// global memory through axi_burst_reader, one 64-weight beat per cycle, straight
// into matmul_q8; activations are re-quantised before every product. The steps run
// one after another under the controller below; each unit has its own pipeline.
//
// Interface: HLS-style block control, ap_start (level, sampled when idle), ap_idle,
// ap_done (one-cycle pulse at the end). token and pos are sampled on the start.
// Two AXI4 read masters (256-bit each) reach the two memory channels holding the
// weight image laid out as described in llama_pkg. Logits leave as one write per
// cycle on out_valid/out_idx/out_data (the shared buffer), index 0..VOCAB-1.
// rd_error reports a failed read response.
// Follows the paper: the split of work (host samples, kernel runs one forward pass),
// int8 Q8_0 weights with fp32 RMSNorm weights, burst reads of 64 int8 weights per
// cycle over two 256-bit ports, and the model dimensions. This design's own choices:
// the weight layout, the on-chip key/value cache, the strictly sequential schedule
// of the steps and every unit's internal schedule. Lint reports rst_n as used both
// synchronously and asynchronously: the synchronous use is only the assertion's
// disable condition, not logic.
module llama_forward
  import fp32_pkg::*;
  import llama_pkg::*;
#(
  parameter int DIM        = llama_pkg::DIM,
  parameter int HIDDEN     = llama_pkg::HIDDEN,
  parameter int N_LAYERS   = llama_pkg::N_LAYERS,
  parameter int N_HEADS    = llama_pkg::N_HEADS,
  parameter int N_KV_HEADS = llama_pkg::N_KV_HEADS,
  parameter int SEQ_LEN    = llama_pkg::SEQ_LEN,
  parameter int VOCAB      = llama_pkg::VOCAB,
  parameter int ADDR_W     = 40,
  localparam int HEAD_SIZE = DIM / N_HEADS,
  localparam int KV_DIM    = DIM * N_KV_HEADS / N_HEADS,
  localparam int KV_AW     = $clog2(N_LAYERS * SEQ_LEN * N_KV_HEADS),
  localparam int VMAX      = (HIDDEN > DIM) ? HIDDEN : DIM   // longest quantised vector
) (
  input  logic              clk,
  input  logic              rst_n,
  // block control
  input  logic              ap_start,
  output logic              ap_idle,
  output logic              ap_done,
  input  logic [31:0]       token,
  input  logic [15:0]       pos,
  // AXI4 read masters to the two weight-memory channels
  output logic [ADDR_W-1:0] m_araddr  [N_PORTS],
  output logic [7:0]        m_arlen   [N_PORTS],
  output logic [2:0]        m_arsize  [N_PORTS],
  output logic [1:0]        m_arburst [N_PORTS],
  output logic              m_arvalid [N_PORTS],
  input  logic              m_arready [N_PORTS],
  input  logic [AXI_DW-1:0] m_rdata   [N_PORTS],
  input  logic [1:0]        m_rresp   [N_PORTS],
  input  logic              m_rlast   [N_PORTS],
  input  logic              m_rvalid  [N_PORTS],
  output logic              m_rready  [N_PORTS],
  // logits to the shared output buffer
  output logic              out_valid,
  output logic [31:0]       out_idx,
  output fp32_t             out_data,
  output logic              rd_error
);
  typedef enum logic [4:0] {
    S_IDLE, S_EMB, S_RMS_LOAD, S_RMS, S_QUANT, S_MATMUL, S_ROPE, S_KV_WRITE, S_ATT,
    S_RESID, S_SWIGLU, S_DONE
  } state_e;

  // which step of the layer comes next (the step sequence of the dataflow above)
  typedef enum logic [4:0] {
    P_EMB, P_RMS_ATT, P_Q_ATT, P_WQ, P_WK, P_WV, P_ROPE, P_KVW, P_ATT, P_Q_O, P_WO,
    P_RES1, P_RMS_FFN, P_Q_FFN, P_W1, P_W3, P_SWIGLU, P_Q_H, P_W2, P_RES2,
    P_RMS_FINAL, P_Q_CLS, P_CLS, P_END
  } step_e;

  typedef enum logic [2:0] {D_Q, D_K, D_V, D_XB, D_HB, D_HB2, D_LOGITS} dest_e;

  state_e state;
  step_e  step;
  logic   launched;
  logic [7:0]  layer;
  logic [31:0] tok_r;
  logic [15:0] pos_r;
  logic [$clog2(N_KV_HEADS+1)-1:0] kv_h;
  logic [15:0] rbeat;

  fp32_t x    [DIM];
  fp32_t xb   [DIM];
  fp32_t q    [DIM];
  fp32_t k    [KV_DIM];
  fp32_t v    [KV_DIM];
  fp32_t hb   [HIDDEN];
  fp32_t hb2  [HIDDEN];
  fp32_t rmsw [DIM];

  // ---------------------------------------------------------------- weight reader
  logic        cmd_valid, cmd_ready;
  logic [31:0] cmd_base, cmd_len;
  logic        rd_valid, rd_ready, rd_last, rd_busy;
  beat_t       rd_data;

  axi_burst_reader #(.AXI_DW(AXI_DW), .N_PORTS(N_PORTS), .ADDR_W(ADDR_W)) u_reader (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_base, .cmd_len,
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready,
    .out_valid(rd_valid), .out_ready(rd_ready), .out_data(rd_data), .out_last(rd_last),
    .busy(rd_busy), .rd_error);

  function automatic int tbase(input tensor_e t, input int l);
    return tensor_base(t, l, DIM, HIDDEN, KV_DIM, VOCAB, N_LAYERS);
  endfunction

  // ---------------------------------------------------------------- units
  logic  emb_start, emb_done, emb_ready;
  fp32_t emb_x [DIM];
  embed_dequant #(.DIM(DIM)) u_embed (
    .clk, .rst_n, .start(emb_start), .in_valid(rd_valid && state == S_EMB),
    .in_ready(emb_ready), .in_data(rd_data), .done(emb_done), .x(emb_x));

  logic  rms_start, rms_done;
  fp32_t rms_out [DIM];
  rmsnorm #(.N(DIM)) u_rmsnorm (
    .clk, .rst_n, .start(rms_start), .x(x), .w(rmsw), .done(rms_done), .out(rms_out));

  logic              qz_start, qz_done;
  logic [15:0]       qz_n;
  fp32_t             qz_in [VMAX];
  logic signed [7:0] qz_q  [VMAX];
  fp32_t             qz_s  [VMAX/GS];
  quantize #(.NMAX(VMAX)) u_quant (
    .clk, .rst_n, .start(qz_start), .n(qz_n), .x(qz_in), .done(qz_done), .q(qz_q), .s(qz_s));

  logic        mm_start, mm_done, mm_ready, mm_out_valid;
  logic [15:0] mm_n;
  logic [31:0] mm_d, mm_out_idx;
  fp32_t       mm_out;
  dest_e       mm_dest;
  matmul_q8 #(.NMAX(VMAX)) u_matmul (
    .clk, .rst_n, .start(mm_start), .n(mm_n), .d(mm_d), .xq(qz_q), .xs(qz_s),
    .in_valid(rd_valid && state == S_MATMUL), .in_ready(mm_ready), .in_data(rd_data),
    .out_valid(mm_out_valid), .out_idx(mm_out_idx), .out_data(mm_out), .done(mm_done));

  logic  rope_start, rope_done;
  fp32_t rope_q [DIM];
  fp32_t rope_k [KV_DIM];
  rope #(.DIM(DIM), .KV_DIM(KV_DIM), .HEAD_SIZE(HEAD_SIZE)) u_rope (
    .clk, .rst_n, .start(rope_start), .pos(pos_r), .q(q), .k(k), .done(rope_done),
    .q_out(rope_q), .k_out(rope_k));

  logic                        kv_we, kv_re;
  logic [KV_AW-1:0]            kv_waddr, kv_raddr;
  logic [32*HEAD_SIZE-1:0]     kv_wkey, kv_wval, kv_rkey, kv_rval;
  kv_cache #(.N_LAYERS(N_LAYERS), .SEQ_LEN(SEQ_LEN), .N_KV_HEADS(N_KV_HEADS),
             .HEAD_SIZE(HEAD_SIZE)) u_cache (
    .clk, .we(kv_we), .waddr(kv_waddr), .wkey(kv_wkey), .wval(kv_wval),
    .r_en(kv_re), .raddr(kv_raddr), .rkey(kv_rkey), .rval(kv_rval));

  logic  att_start, att_done;
  fp32_t att_out [DIM];
  attention #(.N_LAYERS(N_LAYERS), .SEQ_LEN(SEQ_LEN), .N_HEADS(N_HEADS),
              .N_KV_HEADS(N_KV_HEADS), .HEAD_SIZE(HEAD_SIZE)) u_attention (
    .clk, .rst_n, .start(att_start), .layer(layer), .pos(pos_r), .q(q),
    .r_en(kv_re), .raddr(kv_raddr), .rkey(kv_rkey), .rval(kv_rval),
    .done(att_done), .xb(att_out));

  logic  res_start, res_done;
  fp32_t res_out [DIM];
  residual_add #(.N(DIM)) u_resid (
    .clk, .rst_n, .start(res_start), .a(x), .b(xb), .done(res_done), .out(res_out));

  logic  swi_start, swi_done;
  fp32_t swi_out [HIDDEN];
  swiglu #(.N(HIDDEN)) u_swiglu (
    .clk, .rst_n, .start(swi_start), .h1(hb), .h3(hb2), .done(swi_done), .out(swi_out));

  // ---------------------------------------------------------------- routing
  // quantiser input: the FFN hidden vector for W2, the residual stream for the
  // classifier, xb otherwise
  always_comb begin
    for (int i = 0; i < VMAX; i++) begin
      if (step == P_Q_H) qz_in[i] = (i < HIDDEN) ? hb[i % HIDDEN] : FP_ZERO;
      else if (i >= DIM) qz_in[i] = FP_ZERO;
      else if (step == P_Q_CLS) qz_in[i] = x[i % DIM];
      else qz_in[i] = xb[i % DIM];
    end
    qz_n = (step == P_Q_H) ? 16'(HIDDEN) : 16'(DIM);
  end

  always_comb begin
    unique case (state)
      S_EMB:      rd_ready = emb_ready;
      S_MATMUL:   rd_ready = mm_ready;
      S_RMS_LOAD: rd_ready = 1'b1;
      default:    rd_ready = 1'b0;
    endcase
    out_valid = mm_out_valid && mm_dest == D_LOGITS;
    out_idx   = mm_out_idx;
    out_data  = mm_out;
    ap_idle   = state == S_IDLE;
    kv_we     = state == S_KV_WRITE;
    kv_waddr  = KV_AW'((int'(layer) * SEQ_LEN + int'(pos_r)) * N_KV_HEADS + int'(kv_h));
    for (int j = 0; j < HEAD_SIZE; j++) begin
      kv_wkey[32*j +: 32] = k[(int'(kv_h) * HEAD_SIZE + j) % KV_DIM];
      kv_wval[32*j +: 32] = v[(int'(kv_h) * HEAD_SIZE + j) % KV_DIM];
    end
  end

  // matmul set-up of each projection step: tensor, rows, columns, destination
  tensor_e mm_tensor;
  int      mm_rows, mm_cols;
  dest_e   mm_dest_next;
  always_comb begin
    mm_tensor = T_WQ; mm_rows = DIM; mm_cols = DIM; mm_dest_next = D_Q;
    unique case (step)
      P_WQ:  begin mm_tensor = T_WQ;  mm_rows = DIM;    mm_cols = DIM;    mm_dest_next = D_Q;  end
      P_WK:  begin mm_tensor = T_WK;  mm_rows = KV_DIM; mm_cols = DIM;    mm_dest_next = D_K;  end
      P_WV:  begin mm_tensor = T_WV;  mm_rows = KV_DIM; mm_cols = DIM;    mm_dest_next = D_V;  end
      P_WO:  begin mm_tensor = T_WO;  mm_rows = DIM;    mm_cols = DIM;    mm_dest_next = D_XB; end
      P_W1:  begin mm_tensor = T_W1;  mm_rows = HIDDEN; mm_cols = DIM;    mm_dest_next = D_HB; end
      P_W3:  begin mm_tensor = T_W3;  mm_rows = HIDDEN; mm_cols = DIM;    mm_dest_next = D_HB2; end
      P_W2:  begin mm_tensor = T_W2;  mm_rows = DIM;    mm_cols = HIDDEN; mm_dest_next = D_XB; end
      P_CLS: begin mm_tensor = T_EMB; mm_rows = VOCAB;  mm_cols = DIM;    mm_dest_next = D_LOGITS; end
      default: ;
    endcase
  end

  // state that a step moves to
  function automatic state_e state_of(input step_e s);
    unique case (s)
      P_EMB:                                   return S_EMB;
      P_RMS_ATT, P_RMS_FFN, P_RMS_FINAL:       return S_RMS_LOAD;
      P_Q_ATT, P_Q_O, P_Q_FFN, P_Q_H, P_Q_CLS: return S_QUANT;
      P_ROPE:                                  return S_ROPE;
      P_KVW:                                   return S_KV_WRITE;
      P_ATT:                                   return S_ATT;
      P_RES1, P_RES2:                          return S_RESID;
      P_SWIGLU:                                return S_SWIGLU;
      P_END:                                   return S_DONE;
      default:                                 return S_MATMUL;
    endcase
  endfunction

  // next step (the layer loop wraps from P_RES2 back to P_RMS_ATT)
  step_e next_step;
  always_comb begin
    if (step == P_RES2 && int'(layer) != N_LAYERS - 1) next_step = P_RMS_ATT;
    else next_step = step_e'(step + 5'd1);
  end

  // ---------------------------------------------------------------- controller
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; step <= P_EMB; launched <= 1'b0; layer <= '0; tok_r <= '0;
      pos_r <= '0; kv_h <= '0; rbeat <= '0; ap_done <= 1'b0; cmd_valid <= 1'b0; cmd_base <= '0;
      cmd_len <= '0; emb_start <= 1'b0; rms_start <= 1'b0; qz_start <= 1'b0;
      mm_start <= 1'b0; mm_n <= '0; mm_d <= '0; mm_dest <= D_Q; rope_start <= 1'b0;
      att_start <= 1'b0; res_start <= 1'b0; swi_start <= 1'b0;
      for (int i = 0; i < DIM; i++) begin
        x[i] <= FP_ZERO; xb[i] <= FP_ZERO; q[i] <= FP_ZERO; rmsw[i] <= FP_ZERO;
      end
      for (int i = 0; i < KV_DIM; i++) begin k[i] <= FP_ZERO; v[i] <= FP_ZERO; end
      for (int i = 0; i < HIDDEN; i++) begin hb[i] <= FP_ZERO; hb2[i] <= FP_ZERO; end
    end else begin
      ap_done <= 1'b0;
      emb_start <= 1'b0; rms_start <= 1'b0; qz_start <= 1'b0; mm_start <= 1'b0;
      rope_start <= 1'b0; att_start <= 1'b0; res_start <= 1'b0; swi_start <= 1'b0;
      if (cmd_valid && cmd_ready) cmd_valid <= 1'b0;

      // matmul results land in their destination buffer
      if (mm_out_valid) begin
        unique case (mm_dest)
          D_Q:   q[int'(mm_out_idx) % DIM] <= mm_out;
          D_K:   k[int'(mm_out_idx) % KV_DIM] <= mm_out;
          D_V:   v[int'(mm_out_idx) % KV_DIM] <= mm_out;
          D_XB:  xb[int'(mm_out_idx) % DIM] <= mm_out;
          D_HB:  hb[int'(mm_out_idx) % HIDDEN] <= mm_out;
          D_HB2: hb2[int'(mm_out_idx) % HIDDEN] <= mm_out;
          default: ;
        endcase
      end

      unique case (state)
        S_IDLE: if (ap_start) begin
          tok_r <= token;
          pos_r <= pos;
          layer <= '0;
          step <= P_EMB;
          launched <= 1'b0;
          state <= S_EMB;
        end

        S_EMB: begin
          if (!launched) begin
            launched  <= 1'b1;
            cmd_valid <= 1'b1;
            cmd_base  <= 32'(tbase(T_EMB, 0) + int'(tok_r) * row_beats(DIM));
            cmd_len   <= 32'(row_beats(DIM));
            emb_start <= 1'b1;
          end else if (emb_done) begin
            x <= emb_x;
            launched <= 1'b0;
            step <= next_step;
            state <= state_of(next_step);
          end
        end

        S_RMS_LOAD: begin
          if (!launched) begin
            launched  <= 1'b1;
            cmd_valid <= 1'b1;
            cmd_base  <= 32'(tbase(step == P_RMS_ATT ? T_RMS_ATT :
                                   step == P_RMS_FFN ? T_RMS_FFN : T_RMS_FINAL, int'(layer)));
            cmd_len   <= 32'(ceil_div(DIM, 16));
            rbeat     <= '0;
          end else if (rd_valid) begin
            for (int j = 0; j < 16; j++)
              rmsw[(int'(rbeat) * 16 + j) % DIM] <= rd_data[32*j +: 32];
            rbeat <= rbeat + 16'd1;
            if (rd_last) begin
              launched <= 1'b0;
              state <= S_RMS;
            end
          end
        end

        S_RMS: begin
          if (!launched) begin
            launched <= 1'b1;
            rms_start <= 1'b1;
          end else if (rms_done) begin
            if (step == P_RMS_FINAL) x <= rms_out;
            else xb <= rms_out;
            launched <= 1'b0;
            step <= next_step;
            state <= state_of(next_step);
          end
        end

        S_QUANT: begin
          if (!launched) begin
            launched <= 1'b1;
            qz_start <= 1'b1;
          end else if (qz_done) begin
            launched <= 1'b0;
            step <= next_step;
            state <= state_of(next_step);
          end
        end

        S_MATMUL: begin
          if (!launched) begin
            launched  <= 1'b1;
            cmd_valid <= 1'b1;
            cmd_base  <= 32'(tbase(mm_tensor, int'(layer)));
            cmd_len   <= 32'(mm_rows * row_beats(mm_cols));
            mm_start  <= 1'b1;
            mm_n      <= 16'(mm_cols);
            mm_d      <= 32'(mm_rows);
            mm_dest   <= mm_dest_next;
          end else if (mm_done) begin
            launched <= 1'b0;
            step <= next_step;
            state <= state_of(next_step);
          end
        end

        S_ROPE: begin
          if (!launched) begin
            launched <= 1'b1;
            rope_start <= 1'b1;
          end else if (rope_done) begin
            q <= rope_q;
            k <= rope_k;
            kv_h <= '0;
            launched <= 1'b0;
            step <= next_step;
            state <= state_of(next_step);
          end
        end

        S_KV_WRITE: begin          // one key/value head per cycle
          kv_h <= kv_h + 1'b1;
          if (int'(kv_h) == N_KV_HEADS - 1) begin
            step <= next_step;
            state <= state_of(next_step);
          end
        end

        S_ATT: begin
          if (!launched) begin
            launched <= 1'b1;
            att_start <= 1'b1;
          end else if (att_done) begin
            xb <= att_out;
            launched <= 1'b0;
            step <= next_step;
            state <= state_of(next_step);
          end
        end

        S_RESID: begin
          if (!launched) begin
            launched <= 1'b1;
            res_start <= 1'b1;
          end else if (res_done) begin
            x <= res_out;
            launched <= 1'b0;
            if (step == P_RES2 && int'(layer) != N_LAYERS - 1) layer <= layer + 8'd1;
            step <= next_step;
            state <= state_of(next_step);
          end
        end

        S_SWIGLU: begin
          if (!launched) begin
            launched <= 1'b1;
            swi_start <= 1'b1;
          end else if (swi_done) begin
            hb <= swi_out;
            launched <= 1'b0;
            step <= next_step;
            state <= state_of(next_step);
          end
        end

        S_DONE: begin
          ap_done <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // A command is only issued to an idle reader.
  assert property (@(posedge clk) disable iff (!rst_n) cmd_valid |-> cmd_ready)
    else $error("weight reader still busy when a new command was issued");
endmodule
