// quantize: Q8_0 symmetric quantisation of an fp32 activation vector, done before
// every integer matrix-vector product.
//
// The vector is cut into groups of GS = 64 values. For each group the largest
// magnitude m is found (one element per cycle), the group scale is s = m / 127, and
// every value becomes q = round(x * 127 / m), a signed int8 in [-127, 127]
// (rounding half away from zero). The reciprocal 127/m is computed once per group
// with the iterative divider; a group of zeros gets scale 0 and all-zero codes.
// Interface: pulse start with x valid and held and n (a multiple of 64, at most
// NMAX) the number of entries used; done pulses when q and s are complete; they
// hold until the next start. Latency per group is 2*GS + about 30 cycles.
// The formula is the paper's (w = round(127 w / max|w|) per section); the group
// size of 64 and the per-group schedule are this design's choices.
module quantize
  import fp32_pkg::*;
  import llama_pkg::GS;
#(
  parameter int NMAX = llama_pkg::HIDDEN
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [15:0]        n,
  input  fp32_t              x [NMAX],
  output logic               done,
  output logic signed [7:0]  q [NMAX],
  output fp32_t              s [NMAX/GS]
);
  localparam fp32_t C127     = 32'h42fe_0000;    // 127.0
  localparam fp32_t INV_127  = real_to_fp(1.0 / 127.0);
  localparam int    GW       = $clog2(NMAX/GS + 1);

  typedef enum logic [1:0] {IDLE, MAXABS, DIV, QUANT} state_e;
  state_e state;

  logic [GW-1:0]        g;        // current group
  logic [$clog2(GS)-1:0] k;       // element within the group
  logic [15:0]          ng;       // number of groups
  fp32_t                amax, inv;

  logic  dv_start, dv_done, dv_busy;
  fp32_t dv_y;
  fp32_t xe;
  int    idx;

  assign idx = int'(g) * GS + int'(k);
  assign xe  = x[idx % NMAX];

  fp32_div u_div (.clk, .rst_n, .start(dv_start), .a(C127), .b(amax), .busy(dv_busy),
                  .done(dv_done), .y(dv_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; g <= '0; k <= '0; ng <= '0; amax <= FP_ZERO; inv <= FP_ZERO;
      done <= 1'b0; dv_start <= 1'b0;
      for (int j = 0; j < NMAX; j++) q[j] <= '0;
      for (int j = 0; j < NMAX/GS; j++) s[j] <= FP_ZERO;
    end else begin
      done <= 1'b0;
      dv_start <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          ng <= n / 16'(GS);
          g <= '0;
          k <= '0;
          amax <= FP_ZERO;
          state <= MAXABS;
        end
        MAXABS: begin
          if (fp_gt(fp_abs(xe), amax)) amax <= fp_abs(xe);
          k <= k + 1'b1;
          if (int'(k) == GS - 1) begin
            state <= DIV;
            dv_start <= 1'b1;
          end
        end
        DIV: if (dv_done) begin
          inv <= fp_is_zero(amax) ? FP_ZERO : dv_y;
          s[int'(g) % (NMAX/GS)] <= fp_mul(amax, INV_127);
          state <= QUANT;
        end
        QUANT: begin
          q[idx % NMAX] <= 8'(fp_to_int_round(fp_mul(xe, inv), 127));
          k <= k + 1'b1;
          if (int'(k) == GS - 1) begin
            amax <= FP_ZERO;
            g <= g + 1'b1;
            if (16'(g) == ng - 16'd1) begin
              state <= IDLE;
              done <= 1'b1;
            end else begin
              state <= MAXABS;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
