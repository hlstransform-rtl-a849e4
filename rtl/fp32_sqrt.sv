// fp32_sqrt: iterative single-precision square root, y = sqrt(a).
//
// Digit-by-digit (restoring) integer square root of the significand, scaled so the
// result has 24 bits plus one guard bit; one result bit per cycle, 25 cycles, then
// round-to-nearest-even with the remainder as sticky bit. Negative inputs give NaN,
// zero gives zero, subnormals are flushed to zero.
// Interface: pulse start with a valid; done pulses for one cycle with y valid,
// 26 cycles after start. y holds until the next start.
// The paper's RMSNorm needs 1/sqrt(); the algorithm is this design's choice.
module fp32_sqrt
  import fp32_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp32_t a,
  output logic  busy,
  output logic  done,
  output fp32_t y
);
  logic [49:0] rad;          // radicand, consumed two bits per step
  logic [27:0] rem;
  logic [24:0] root;
  logic [4:0]  cnt;
  logic [7:0]  er;

  logic [27:0] trial;
  logic [27:0] rem_sh;
  always_comb begin
    rem_sh = {rem[25:0], rad[49:48]};
    trial  = {1'b0, root, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; y <= FP_ZERO;
      rad <= '0; rem <= '0; root <= '0; cnt <= '0; er <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem <= '0; root <= '0; cnt <= '0;
        if (fp_is_zero(a)) begin
          y <= FP_ZERO; done <= 1'b1; busy <= 1'b0;
        end else if (a[31] || (a[30:23] == 8'hff && a[22:0] != 0)) begin
          y <= FP_NAN; done <= 1'b1; busy <= 1'b0;
        end else if (a[30:23] == 8'hff) begin
          y <= FP_INF; done <= 1'b1; busy <= 1'b0;
        end else begin
          busy <= 1'b1;
          // value = M * 2^(E-150); unbiased exponent E-127 even: sqrt(M<<25),
          // odd: sqrt(M<<26); both give a 25-bit root (24 bits + guard).
          if (a[23]) begin            // biased exponent odd -> unbiased even
            rad <= {1'b1, a[22:0], 26'd0} >> 1;
            er  <= 8'((int'(a[30:23]) - 127) / 2 + 127);
          end else begin
            rad <= {1'b1, a[22:0], 26'd0};
            er  <= 8'((int'(a[30:23]) - 128) / 2 + 127);
          end
        end
      end else if (busy) begin
        rad <= rad << 2;
        cnt <= cnt + 5'd1;
        if (rem_sh >= trial) begin
          rem  <= rem_sh - trial;
          root <= {root[23:0], 1'b1};
        end else begin
          rem  <= rem_sh;
          root <= {root[23:0], 1'b0};
        end
        if (cnt == 5'd24) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (rem_sh >= trial)
            y <= fp_pack(1'b0, int'(er), root[23:0], 1'b1, (rem_sh - trial) != 0);
          else
            y <= fp_pack(1'b0, int'(er), root[23:0], 1'b0, rem_sh != 0);
        end
      end
    end
  end
endmodule
