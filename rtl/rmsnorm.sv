// rmsnorm: RMS normalisation, out[i] = w[i] * x[i] / sqrt(mean(x^2) + 1e-5).
//
// Three phases, as in the kernel's rmsnorm pipelines: (1) the sum of squares,
// one element per cycle with a single fp32 multiply-add (N cycles); (2) the scale
// 1/sqrt(ss/N + eps), computed once with the iterative square root and divider
// (about 55 cycles); (3) normalise and apply the fp32 weights, one element per cycle
// (N cycles). The weights stay in float32, as the paper keeps RMSNorm parameters
// unquantised.
// Interface: pulse start with x and w valid and held; done pulses once out is
// complete; out holds until the next start. Latency about 2N + 60 cycles.
// The element-per-cycle schedule and the summation order (sequential) are this
// design's choices.
module rmsnorm
  import fp32_pkg::*;
#(
  parameter int N = 768
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp32_t x   [N],
  input  fp32_t w   [N],
  output logic  done,
  output fp32_t out [N]
);
  localparam fp32_t INV_N = real_to_fp(1.0 / N);
  localparam fp32_t EPS   = real_to_fp(1.0e-5);

  typedef enum logic [2:0] {IDLE, SUMSQ, SQRT, DIV, SCALE} state_e;
  state_e state;

  logic [$clog2(N+1)-1:0] i;
  fp32_t ss, inv;

  logic  sq_start, sq_done, dv_start, dv_done, sq_busy, dv_busy;
  fp32_t sq_y, dv_y, ms;

  assign ms = fp_add(fp_mul(ss, INV_N), EPS);

  fp32_sqrt u_sqrt (.clk, .rst_n, .start(sq_start), .a(ms), .busy(sq_busy), .done(sq_done), .y(sq_y));
  fp32_div  u_div  (.clk, .rst_n, .start(dv_start), .a(FP_ONE), .b(sq_y), .busy(dv_busy),
                    .done(dv_done), .y(dv_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; i <= '0; ss <= FP_ZERO; inv <= FP_ZERO; done <= 1'b0;
      sq_start <= 1'b0; dv_start <= 1'b0;
      for (int j = 0; j < N; j++) out[j] <= FP_ZERO;
    end else begin
      done <= 1'b0;
      sq_start <= 1'b0;
      dv_start <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          ss <= FP_ZERO;
          i <= '0;
          state <= SUMSQ;
        end
        SUMSQ: begin
          ss <= fp_add(ss, fp_mul(x[i], x[i]));
          i <= i + 1'b1;
          if (int'(i) == N - 1) begin
            state <= SQRT;
            sq_start <= 1'b1;
          end
        end
        SQRT: if (sq_done) begin
          dv_start <= 1'b1;
          state <= DIV;
        end
        DIV: if (dv_done) begin
          inv <= dv_y;
          i <= '0;
          state <= SCALE;
        end
        SCALE: begin
          out[i] <= fp_mul(w[i], fp_mul(inv, x[i]));
          i <= i + 1'b1;
          if (int'(i) == N - 1) begin
            state <= IDLE;
            done <= 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
