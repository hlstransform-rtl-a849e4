// attention: causal multi-head attention of one token against the key/value cache,
// with grouped-query sharing of key/value heads.
//
// For each query head h (key/value head h / (N_HEADS/N_KV_HEADS)) and the current
// position pos of layer `layer`:
//   iterate: score[t] = (q_h . k_t) / sqrt(HEAD_SIZE) for t = 0..pos; one cached key
//            per cycle, the 64-element dot product done by 64 fp32 multipliers and
//            an fp32 adder tree;
//   max:     m = max_t score[t], one per cycle;
//   exp/sum: a[t] = exp(score[t] - m), sum += a[t], with the iterative exponential;
//   norm:    a[t] = a[t] * (1/sum), one divide then one multiply per cycle;
//   acc:     out_h = sum_t a[t] * v_t, one cached value vector per cycle into 64
//            fp32 accumulators.
// These are the stages the paper's timing report lists (iterate, max, exp, sum,
// norm, acc). The cache is read through a synchronous port (data one cycle after
// r_en). Interface: pulse start with q, layer and pos valid and held; done pulses
// when xb holds the concatenated head outputs; xb holds until the next start.
// Latency per head is roughly (pos+1)*(3 + 27) + 60 cycles.
// Lane counts and the adder-tree summation order are this design's choices.
module attention
  import fp32_pkg::*;
#(
  parameter int N_LAYERS   = 12,
  parameter int SEQ_LEN    = 1024,
  parameter int N_HEADS    = 12,
  parameter int N_KV_HEADS = 12,
  parameter int HEAD_SIZE  = 64,
  localparam int DIM       = N_HEADS * HEAD_SIZE,
  localparam int WORD_W    = 32 * HEAD_SIZE,
  localparam int AW        = $clog2(N_LAYERS * SEQ_LEN * N_KV_HEADS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [7:0]        layer,
  input  logic [15:0]       pos,
  input  fp32_t             q  [DIM],
  // cache read port
  output logic              r_en,
  output logic [AW-1:0]     raddr,
  input  logic [WORD_W-1:0] rkey,
  input  logic [WORD_W-1:0] rval,
  output logic              done,
  output fp32_t             xb [DIM]
);
  localparam fp32_t SCALE  = real_to_fp(1.0 / $sqrt(real'(HEAD_SIZE)));
  localparam int    KV_MUL = N_HEADS / N_KV_HEADS;
  localparam int    LVL    = $clog2(HEAD_SIZE);

  typedef enum logic [2:0] {IDLE, ITER, MAX, EXP, DIV, NORM, ACC, STORE} state_e;
  state_e state;

  logic [$clog2(N_HEADS+1)-1:0] h;
  logic [15:0]                  t;        // position being issued
  logic [15:0]                  td;       // position whose data returns
  logic                         rd_pend;  // read issued last cycle
  fp32_t                        att [SEQ_LEN];
  fp32_t                        m, sum, inv;
  fp32_t                        acc [HEAD_SIZE];

  // cache address of position tt for the current head
  function automatic logic [AW-1:0] addr_of(input logic [15:0] tt);
    return AW'((int'(layer) * SEQ_LEN + int'(tt)) * N_KV_HEADS + int'(h) / KV_MUL);
  endfunction

  // q_h . k scaled
  fp32_t tree [HEAD_SIZE];
  fp32_t score;
  always_comb begin
    for (int j = 0; j < HEAD_SIZE; j++)
      tree[j] = fp_mul(q[(int'(h) * HEAD_SIZE + j) % DIM], rkey[32*j +: 32]);
    for (int lv = 0; lv < LVL; lv++)
      for (int j = 0; j < (HEAD_SIZE >> (lv + 1)); j++)
        tree[j] = fp_add(tree[2*j], tree[2*j+1]);
    score = fp_mul(tree[0], SCALE);
  end

  logic  ex_start, ex_done, ex_busy, dv_start, dv_done, dv_busy;
  fp32_t ex_y, dv_y;
  fp32_t att_t;
  assign att_t = att[int'(t) % SEQ_LEN];

  fp32_exp u_exp (.clk, .rst_n, .start(ex_start), .x(fp_sub(att_t, m)), .busy(ex_busy),
                  .done(ex_done), .y(ex_y));
  fp32_div u_div (.clk, .rst_n, .start(dv_start), .a(FP_ONE), .b(sum), .busy(dv_busy),
                  .done(dv_done), .y(dv_y));

  always_comb begin
    r_en  = (state == ITER || state == ACC) && t <= pos;
    raddr = addr_of(t);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; h <= '0; t <= '0; td <= '0; rd_pend <= 1'b0;
      m <= FP_ZERO; sum <= FP_ZERO; inv <= FP_ZERO; done <= 1'b0;
      ex_start <= 1'b0; dv_start <= 1'b0;
      for (int j = 0; j < SEQ_LEN; j++) att[j] <= FP_ZERO;
      for (int j = 0; j < HEAD_SIZE; j++) acc[j] <= FP_ZERO;
      for (int j = 0; j < DIM; j++) xb[j] <= FP_ZERO;
    end else begin
      done <= 1'b0;
      ex_start <= 1'b0;
      dv_start <= 1'b0;
      rd_pend <= r_en;
      td <= t;
      unique case (state)
        IDLE: if (start) begin
          h <= '0;
          t <= '0;
          state <= ITER;
        end
        ITER: begin
          if (t <= pos) t <= t + 16'd1;
          if (rd_pend) att[int'(td) % SEQ_LEN] <= score;
          if (rd_pend && td == pos) begin
            t <= '0;
            state <= MAX;
          end
        end
        MAX: begin
          if (t == 0 || fp_gt(att_t, m)) m <= att_t;
          t <= t + 16'd1;
          if (t == pos) begin
            t <= '0;
            sum <= FP_ZERO;
            ex_start <= 1'b1;
            state <= EXP;
          end
        end
        EXP: if (ex_done) begin
          att[int'(t) % SEQ_LEN] <= ex_y;
          sum <= fp_add(sum, ex_y);
          if (t == pos) begin
            dv_start <= 1'b1;
            state <= DIV;
          end else begin
            t <= t + 16'd1;
            ex_start <= 1'b1;
          end
        end
        DIV: if (dv_done) begin
          inv <= dv_y;
          t <= '0;
          state <= NORM;
        end
        NORM: begin
          att[int'(t) % SEQ_LEN] <= fp_mul(att_t, inv);
          t <= t + 16'd1;
          if (t == pos) begin
            t <= '0;
            for (int j = 0; j < HEAD_SIZE; j++) acc[j] <= FP_ZERO;
            state <= ACC;
          end
        end
        ACC: begin
          if (t <= pos) t <= t + 16'd1;
          if (rd_pend)
            for (int j = 0; j < HEAD_SIZE; j++)
              acc[j] <= fp_add(acc[j], fp_mul(att[int'(td) % SEQ_LEN], rval[32*j +: 32]));
          if (rd_pend && td == pos) state <= STORE;
        end
        STORE: begin
          for (int j = 0; j < HEAD_SIZE; j++) xb[(int'(h) * HEAD_SIZE + j) % DIM] <= acc[j];
          t <= '0;
          h <= h + 1'b1;
          if (int'(h) == N_HEADS - 1) begin
            state <= IDLE;
            done <= 1'b1;
          end else begin
            state <= ITER;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
