// fp32_exp: iterative single-precision exponential, y = exp(x).
//
// x is turned into a signed fixed-point number with 24 fraction bits and multiplied
// by log2(e) in fixed point, giving t = n + f with integer n and 0 <= f < 1 (doing
// this scaling in fixed point keeps the error of t at 2^-24 for large |x|). Then 2^f is built as a
// product of the constants 2^(2^-k) for each set bit k of f (one multiply by a
// 32-bit constant per cycle, 24 cycles), and n becomes the exponent of the result.
// The constants are computed at elaboration time: C_k = round(2^(2^-k) * 2^30).
// Results below the normal range flush to zero; above it they give +inf.
// Interface: pulse start with x valid; done pulses for one cycle with y valid,
// 26 cycles after start. y holds until the next start.
// The paper requires exact (not piecewise-linear) nonlinear functions; this
// shift-and-multiply method is this design's choice and is accurate to about
// one unit in the last place.
module fp32_exp
  import fp32_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp32_t x,
  output logic  busy,
  output logic  done,
  output fp32_t y
);
  localparam logic signed [31:0] LOG2E_Q30 = 32'sd1549082005;  // round(log2(e) * 2^30)
  localparam fp32_t X_MAX = 32'h42b1_7213;    // 88.7228: exp() above overflows
  localparam fp32_t X_MIN = 32'hc2ae_ac4a;    // -87.3365: exp() below is subnormal
  localparam int    FB    = 24;

  typedef logic [31:0] ctab_t [FB];
  function automatic ctab_t make_ctab();
    ctab_t t;
    real   ln2;
    ln2 = 0.6931471805599453;
    for (int k = 1; k <= FB; k++)
      t[k-1] = 32'($rtoi(real_exp(ln2 / (2.0 ** k)) * 1073741824.0 + 0.5));
    return t;
  endfunction
  localparam ctab_t CTAB = make_ctab();

  typedef enum logic [1:0] {IDLE, SCALE, POW, PACK} state_e;
  state_e state;

  fp32_t             xr;
  logic signed [31:0] fx;           // scaled argument, Q8.24
  logic [31:0]       acc;          // Q2.30, value in [1,2)
  logic [23:0]       frac;
  logic [4:0]        k;
  logic signed [31:0] n;

  logic signed [31:0] xq;           // x in Q8.24
  logic signed [63:0] tq;           // x*log2(e) in Q.54
  logic [63:0] prod;
  always_comb begin
    xq       = fp_to_fixed_floor(xr, FB);
    tq       = 64'(xq) * 64'(LOG2E_Q30);
    fx       = 32'(tq >>> 30);
    prod     = {32'd0, acc} * {32'd0, CTAB[k]};
  end

  assign busy = state != IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; done <= 1'b0; y <= FP_ZERO; xr <= FP_ZERO;
      acc <= '0; frac <= '0; k <= '0; n <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          xr <= x;
          state <= SCALE;
        end
        SCALE: begin
          n     <= fx >>> FB;
          frac  <= fx[FB-1:0];
          acc   <= 32'h4000_0000;
          k     <= 5'd0;
          if (xr[30:23] == 8'hff && xr[22:0] != 0) begin
            y <= FP_NAN; done <= 1'b1; state <= IDLE;
          end else if (fp_gt(xr, X_MAX)) begin
            y <= FP_INF; done <= 1'b1; state <= IDLE;
          end else if (fp_gt(X_MIN, xr)) begin
            y <= FP_ZERO; done <= 1'b1; state <= IDLE;
          end else begin
            state <= POW;
          end
        end
        POW: begin
          if (frac[FB-1]) acc <= prod[61:30];
          frac <= frac << 1;
          k <= k + 5'd1;
          if (k == 5'(FB - 1)) state <= PACK;
        end
        PACK: begin
          if (n + 127 <= 0) y <= FP_ZERO;
          else y <= fp_pack(1'b0, int'(n) + 127, acc[30:7], acc[6], |acc[5:0]);
          done <= 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
