// embed_dequant: token-embedding lookup. Turns one quantised row of the int8
// embedding table into the fp32 residual stream x.
//
// The row arrives as a stream of 512-bit beats in the Q8_0 row format of llama_pkg:
// first the group scales, then one beat of 64 int8 values per group. Every data beat
// is dequantised in a single cycle, x[64g+k] = q[k] * scale[g], with 64 int-to-float
// converters and multipliers side by side (the loop over a group is fully unrolled).
// Interface: pulse start (with the row's beats then offered on in_valid/in_data;
// in_ready is high while the unit is busy), done pulses once the last group is
// written; x holds the row until the next start. One beat per cycle: a DIM-wide
// row takes rs_scale(DIM) + DIM/64 cycles.
// The paper quantises the embedding table along with the other weights; the fully
// unrolled dequantiser is this design's choice.
module embed_dequant
  import fp32_pkg::*;
  import llama_pkg::*;
#(
  parameter int DIM = llama_pkg::DIM
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              in_valid,
  output logic              in_ready,
  input  beat_t             in_data,
  output logic              done,
  output fp32_t             x [DIM]
);
  localparam int G  = DIM / GS;
  localparam int SB = rs_scale(DIM);

  fp32_t       scale [SB*16];
  logic [15:0] beat_idx;
  logic        busy;

  assign in_ready = busy;

  // 64 dequantisers for the current group
  fp32_t deq [GS];
  fp32_t cur_scale;
  always_comb begin
    cur_scale = scale[(int'(beat_idx) - SB) % (SB*16)];
    for (int k = 0; k < GS; k++)
      deq[k] = fp_mul(fp_from_int(32'(signed'(in_data[8*k +: 8]))), cur_scale);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; beat_idx <= '0;
      for (int i = 0; i < SB*16; i++) scale[i] <= FP_ZERO;
      for (int i = 0; i < DIM; i++) x[i] <= FP_ZERO;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        beat_idx <= '0;
      end else if (busy && in_valid) begin
        beat_idx <= beat_idx + 16'd1;
        if (beat_idx < 16'(SB)) begin
          for (int j = 0; j < 16; j++)
            scale[int'(beat_idx)*16 + j] <= in_data[32*j +: 32];
        end else begin
          for (int k = 0; k < GS; k++)
            x[(int'(beat_idx) - SB) * GS + k] <= deq[k];
          if (int'(beat_idx) == SB + G - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end
endmodule
