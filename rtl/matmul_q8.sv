// matmul_q8: int8 matrix-vector product with Q8_0 group scales,
// out[i] = sum_g (sum_k W[i][64g+k] * xq[64g+k]) * ws[i][g] * xs[g].
//
// The weight matrix W (d rows by n columns) is not stored on chip: its rows stream in
// from global memory, one 512-bit beat per cycle, in the row format of llama_pkg
// (group scales first, then one beat of 64 int8 weights per group). The quantised
// input vector (xq, xs) is held in registers, fully partitioned, so a whole group
// is read at once. Two pipeline stages run at one beat per cycle:
//   stage 1: 64 int8 x int8 products and an adder tree give the int32 group dot;
//   stage 2: the dot is converted to fp32, scaled by the weight and input group
//            scales and added to the row's fp32 accumulator.
// After the last group of a row the result leaves on out_valid/out_idx/out_data
// (one cycle, no back-pressure). A d x n product takes d * (rs_scale(n) + n/64)
// cycles plus 2 cycles of pipeline latency when the stream does not stall.
// Interface: pulse start with n, d, xq and xs valid (xq/xs held until done); beats on
// in_valid/in_data are taken while in_ready is high; done pulses after the last row.
// The paper pipelines this loop at one iteration per cycle and reads 64 int8
// weights per cycle; the two-stage split and the fp32 accumulation order (the one of
// the int8 forward pass the paper builds on) are this design's choices.
module matmul_q8
  import fp32_pkg::*;
  import llama_pkg::*;
#(
  parameter int NMAX = llama_pkg::HIDDEN
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [15:0]       n,
  input  logic [31:0]       d,
  input  logic signed [7:0] xq [NMAX],
  input  fp32_t             xs [NMAX/GS],
  input  logic              in_valid,
  output logic              in_ready,
  input  beat_t             in_data,
  output logic              out_valid,
  output logic [31:0]       out_idx,
  output fp32_t             out_data,
  output logic              done
);
  localparam int SBMAX = rs_scale(NMAX);
  localparam int GMAX  = NMAX / GS;

  logic        busy;
  logic [15:0] g_cnt, sb_cnt, bi;   // groups per row, scale beats per row, beat in row
  logic [31:0] row, d_r;
  fp32_t       ws [SBMAX*16];

  // stage 1 registers
  logic               s1_valid, s1_last;
  logic signed [31:0] s1_dot;
  logic [15:0]        s1_g;
  logic [31:0]        s1_row;
  // stage 2 accumulator
  fp32_t              acc;

  logic in_fire;
  assign in_ready = busy;
  assign in_fire  = busy && in_valid;

  // stage 1: group dot product
  logic signed [31:0] dot;
  logic [15:0]        g_in;
  always_comb begin
    g_in = bi - sb_cnt;
    dot  = '0;
    for (int k = 0; k < GS; k++)
      dot += 32'(signed'(in_data[8*k +: 8])) * 32'(xq[(int'(g_in) * GS + k) % NMAX]);
  end

  // stage 2: scale and accumulate
  fp32_t prod, acc_next;
  always_comb begin
    prod     = fp_mul(fp_mul(fp_from_int(s1_dot), ws[int'(s1_g) % (SBMAX*16)]),
                      xs[int'(s1_g) % GMAX]);
    acc_next = fp_add((s1_g == 0) ? FP_ZERO : acc, prod);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; g_cnt <= '0; sb_cnt <= '0; bi <= '0; row <= '0; d_r <= '0;
      s1_valid <= 1'b0; s1_last <= 1'b0; s1_dot <= '0; s1_g <= '0; s1_row <= '0;
      acc <= FP_ZERO; out_valid <= 1'b0; out_idx <= '0; out_data <= FP_ZERO; done <= 1'b0;
      for (int j = 0; j < SBMAX*16; j++) ws[j] <= FP_ZERO;
    end else begin
      done      <= 1'b0;
      out_valid <= 1'b0;
      s1_valid  <= 1'b0;
      if (start) begin
        busy   <= 1'b1;
        g_cnt  <= n / 16'(GS);
        sb_cnt <= 16'(ceil_div(int'(n) / GS, 16));
        bi     <= '0;
        row    <= '0;
        d_r    <= d;
      end else if (in_fire) begin
        if (bi < sb_cnt) begin
          for (int j = 0; j < 16; j++)
            ws[(int'(bi) * 16 + j) % (SBMAX*16)] <= in_data[32*j +: 32];
        end else begin
          s1_valid <= 1'b1;
          s1_dot   <= dot;
          s1_g     <= g_in;
          s1_last  <= g_in == g_cnt - 16'd1;
          s1_row   <= row;
        end
        if (bi == sb_cnt + g_cnt - 16'd1) begin
          bi  <= '0;
          row <= row + 32'd1;
          if (row == d_r - 32'd1) busy <= 1'b0;
        end else begin
          bi <= bi + 16'd1;
        end
      end
      if (s1_valid) begin
        acc <= acc_next;
        if (s1_last) begin
          out_valid <= 1'b1;
          out_idx   <= s1_row;
          out_data  <= acc_next;
          if (s1_row == d_r - 32'd1) done <= 1'b1;
        end
      end
    end
  end
endmodule
