// fp32_div: iterative single-precision divider, y = a / b.
//
// Restoring division of the two 24-bit significands, one quotient bit per cycle
// (26 bits: 24 result bits, a guard bit and the remainder as sticky), then
// round-to-nearest-even packing with the fp32_pkg conventions (subnormals flushed
// to zero). x/0 gives a signed infinity, 0/0 a NaN.
// Interface: pulse start with a and b valid; done pulses for one cycle with y
// valid, 28 cycles after start. y holds until the next start.
// The paper's kernel needs division in RMSNorm, softmax and quantisation but does
// not say how it is built; the radix-2 iteration is this design's choice.
module fp32_div
  import fp32_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp32_t a,
  input  fp32_t b,
  output logic  busy,
  output logic  done,
  output fp32_t y
);
  logic [25:0] rem;          // partial remainder
  logic [23:0] dvs;          // divisor significand
  logic [25:0] q;
  logic [4:0]  cnt;
  logic        s;
  logic signed [10:0] e;

  logic [25:0] rem_next;
  logic        qbit;
  always_comb begin
    qbit     = rem >= {2'b00, dvs};
    rem_next = (qbit ? rem - {2'b00, dvs} : rem) << 1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; y <= FP_ZERO;
      rem <= '0; dvs <= '0; q <= '0; cnt <= '0; s <= 1'b0; e <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        s <= a[31] ^ b[31];
        e <= 11'(signed'(int'(a[30:23]) - int'(b[30:23]) + 127));
        rem <= {2'b00, 1'b1, a[22:0]};
        dvs <= {1'b1, b[22:0]};
        q <= '0;
        cnt <= 5'd0;
        if (a[30:23] == 8'hff || b[30:23] == 8'hff || fp_is_zero(a) || fp_is_zero(b)) begin
          // special operands finish immediately
          busy <= 1'b0;
          done <= 1'b1;
          if ((a[30:23] == 8'hff && a[22:0] != 0) || (b[30:23] == 8'hff && b[22:0] != 0))
            y <= FP_NAN;
          else if (fp_is_zero(b))
            y <= fp_is_zero(a) ? FP_NAN : {a[31] ^ b[31], 8'hff, 23'd0};
          else if (b[30:23] == 8'hff)
            y <= (a[30:23] == 8'hff) ? FP_NAN : {a[31] ^ b[31], 31'd0};
          else if (a[30:23] == 8'hff)
            y <= {a[31] ^ b[31], 8'hff, 23'd0};
          else
            y <= {a[31] ^ b[31], 31'd0};
        end else begin
          busy <= 1'b1;
        end
      end else if (busy) begin
        q   <= {q[24:0], qbit};
        rem <= rem_next;
        cnt <= cnt + 5'd1;
        if (cnt == 5'd25) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (q[24]) // {q[24:0],qbit} has its leading one at bit 25
            y <= fp_pack(s, int'(e), q[24:1], q[0], qbit | (rem_next != 0));
          else
            y <= fp_pack(s, int'(e) - 1, {q[23:0]}, qbit, rem_next != 0);
        end
      end
    end
  end
endmodule
