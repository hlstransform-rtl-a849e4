// swiglu: SwiGLU gate of the feed-forward network,
// out[i] = h1[i] * sigmoid(h1[i]) * h3[i] = h1[i] / (1 + exp(-h1[i])) * h3[i].
//
// One element at a time: the iterative exponential, then the iterative divider,
// then one multiply, about 56 cycles per element.
// Interface: pulse start with h1, h3 valid and held; done pulses when out is
// complete; out holds until the next start.
// The paper computes the nonlinearity exactly and pipelines the loop; sharing one
// exp and one divider across the vector (rather than a pipeline of them) is this
// design's choice, traded for area.
module swiglu
  import fp32_pkg::*;
#(
  parameter int N = 2048
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp32_t h1  [N],
  input  fp32_t h3  [N],
  output logic  done,
  output fp32_t out [N]
);
  typedef enum logic [1:0] {IDLE, EXP, DIV} state_e;
  state_e state;
  logic [$clog2(N+1)-1:0] i;

  logic  ex_start, ex_done, ex_busy, dv_start, dv_done, dv_busy;
  fp32_t ex_y, dv_y, xi;

  assign xi = h1[int'(i) % N];

  fp32_exp u_exp (.clk, .rst_n, .start(ex_start), .x(fp_neg(xi)), .busy(ex_busy),
                  .done(ex_done), .y(ex_y));
  fp32_div u_div (.clk, .rst_n, .start(dv_start), .a(xi), .b(fp_add(FP_ONE, ex_y)),
                  .busy(dv_busy), .done(dv_done), .y(dv_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; i <= '0; done <= 1'b0; ex_start <= 1'b0; dv_start <= 1'b0;
      for (int j = 0; j < N; j++) out[j] <= FP_ZERO;
    end else begin
      done <= 1'b0;
      ex_start <= 1'b0;
      dv_start <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          i <= '0;
          ex_start <= 1'b1;
          state <= EXP;
        end
        EXP: if (ex_done) begin
          dv_start <= 1'b1;
          state <= DIV;
        end
        DIV: if (dv_done) begin
          out[int'(i) % N] <= fp_mul(dv_y, h3[int'(i) % N]);
          i <= i + 1'b1;
          if (int'(i) == N - 1) begin
            state <= IDLE;
            done <= 1'b1;
          end else begin
            ex_start <= 1'b1;
            state <= EXP;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
