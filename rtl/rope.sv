// rope: rotary position embedding of the query and key vectors of one token.
//
// Within every head, entries (2p, 2p+1) are rotated by the angle pos * f_p with
// f_p = 10000^(-2p/HEAD_SIZE):
//   v0' = v0*cos - v1*sin,   v1' = v0*sin + v1*cos,
// for all N_HEADS query heads and the KV_DIM/HEAD_SIZE key heads.
// The angle is formed in fixed point, in turns: pos * (f_p / 2pi) with a 40-bit
// fraction, so reduction modulo one turn is exact for any position. cos and sin
// come from a 30-step CORDIC on the angle within its quadrant and are converted to
// fp32; the rotations use fp32 multipliers and adders. The per-pair constants
// f_p/2pi are computed at elaboration time.
// Schedule: for each pair index p, one cycle of set-up, 30 CORDIC cycles, then one
// head per cycle (query and key pair rotated together), so a call takes about
// HEAD_SIZE/2 * (31 + N_HEADS) cycles.
// Interface: pulse start with q, k and pos valid and held; done pulses when q_out
// and k_out are complete; they hold until the next start.
// The paper pipelines the rotation loop but does not say how sin, cos and the power
// are computed; the CORDIC and the fixed-point angle are this design's choices.
module rope
  import fp32_pkg::*;
#(
  parameter int DIM       = 768,
  parameter int KV_DIM    = 768,
  parameter int HEAD_SIZE = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] pos,
  input  fp32_t       q     [DIM],
  input  fp32_t       k     [KV_DIM],
  output logic        done,
  output fp32_t       q_out [DIM],
  output fp32_t       k_out [KV_DIM]
);
  localparam int NP      = HEAD_SIZE / 2;
  localparam int N_HEADS = DIM / HEAD_SIZE;
  localparam int ITERS   = 30;

  typedef logic [39:0] ftab_t [NP];
  function automatic ftab_t make_ftab();
    ftab_t t;
    real   ln10000, two_pi, f;
    ln10000 = 9.210340371976184;
    two_pi  = 6.283185307179586;
    for (int p = 0; p < NP; p++) begin
      f = real_exp(-(2.0 * p / HEAD_SIZE) * ln10000) / two_pi;   // turns per position
      t[p] = 40'(longint'(f * 1099511627776.0));   // * 2^40, rounded
    end
    return t;
  endfunction
  localparam ftab_t FTURN = make_ftab();

  // CORDIC constants: atan(2^-i) and the gain 1/prod(sqrt(1+2^-2i)), Q2.30
  localparam logic signed [31:0] ATAN [ITERS] = '{
    843314857, 497837829, 263043837, 133525159, 67021687, 33543516, 16775851, 8388437,
    4194283, 2097149, 1048576, 524288, 262144, 131072, 65536, 32768, 16384, 8192, 4096,
    2048, 1024, 512, 256, 128, 64, 32, 16, 8, 4, 2};
  localparam logic signed [31:0] K_GAIN = 32'sd652032874;
  localparam logic [31:0]        HALF_PI_Q30 = 32'd1686629713;

  typedef enum logic [1:0] {IDLE, SETUP, CORDIC, ROT} state_e;
  state_e state;

  logic [$clog2(NP+1)-1:0]      p;
  logic [$clog2(N_HEADS+1)-1:0] h;
  logic [4:0]                   it;
  logic [1:0]                   quad;
  logic signed [31:0]           cx, cy, cz;
  fp32_t                        fcos, fsin;

  // angle of pair p in turns (Q0.32) and its position inside the quadrant (rad, Q2.30)
  logic [79:0] turns;
  logic [31:0] phase;
  logic [63:0] zrad;
  always_comb begin
    turns = 80'(pos) * 80'(FTURN[int'(p) % NP]);
    phase = turns[39:8];
    zrad  = 64'(phase[29:0]) * 64'(HALF_PI_Q30);
  end

  // quadrant correction of the CORDIC result
  fp32_t c_fp, s_fp;
  always_comb begin
    c_fp = fp_from_fixed(cx, 30);
    s_fp = fp_from_fixed(cy, 30);
    // (cos, sin) of a + quad*pi/2
    unique case (quad)
      2'd0:    begin fcos = c_fp;         fsin = s_fp;         end
      2'd1:    begin fcos = fp_neg(s_fp); fsin = c_fp;         end
      2'd2:    begin fcos = fp_neg(c_fp); fsin = fp_neg(s_fp); end
      default: begin fcos = s_fp;         fsin = fp_neg(c_fp); end
    endcase
  end

  // rotation of the pair of head h
  int    iq;
  fp32_t q0, q1, k0, k1;
  always_comb begin
    iq = int'(h) * HEAD_SIZE + 2 * int'(p);
    q0 = q_out[iq % DIM];
    q1 = q_out[(iq + 1) % DIM];
    k0 = k_out[iq % KV_DIM];
    k1 = k_out[(iq + 1) % KV_DIM];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; p <= '0; h <= '0; it <= '0; quad <= '0;
      cx <= '0; cy <= '0; cz <= '0; done <= 1'b0;
      for (int j = 0; j < DIM; j++) q_out[j] <= FP_ZERO;
      for (int j = 0; j < KV_DIM; j++) k_out[j] <= FP_ZERO;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          q_out <= q;
          k_out <= k;
          p <= '0;
          state <= SETUP;
        end
        SETUP: begin
          quad  <= phase[31:30];
          cx    <= K_GAIN;
          cy    <= '0;
          cz    <= signed'(zrad[61:30]);
          it    <= '0;
          state <= CORDIC;
        end
        CORDIC: begin
          if (!cz[31]) begin
            cx <= cx - (cy >>> it);
            cy <= cy + (cx >>> it);
            cz <= cz - ATAN[it];
          end else begin
            cx <= cx + (cy >>> it);
            cy <= cy - (cx >>> it);
            cz <= cz + ATAN[it];
          end
          it <= it + 5'd1;
          if (int'(it) == ITERS - 1) state <= ROT;
          h <= '0;
        end
        ROT: begin
          q_out[iq % DIM]       <= fp_sub(fp_mul(q0, fcos), fp_mul(q1, fsin));
          q_out[(iq + 1) % DIM] <= fp_add(fp_mul(q0, fsin), fp_mul(q1, fcos));
          if (iq < KV_DIM) begin
            k_out[iq % KV_DIM]       <= fp_sub(fp_mul(k0, fcos), fp_mul(k1, fsin));
            k_out[(iq + 1) % KV_DIM] <= fp_add(fp_mul(k0, fsin), fp_mul(k1, fcos));
          end
          h <= h + 1'b1;
          if (int'(h) == N_HEADS - 1) begin
            p <= p + 1'b1;
            if (int'(p) == NP - 1) begin
              state <= IDLE;
              done  <= 1'b1;
            end else begin
              state <= SETUP;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
