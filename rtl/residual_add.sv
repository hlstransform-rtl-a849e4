// residual_add: residual connection of the transformer block, out = a + b.
//
// Adds two fp32 vectors of N entries with LANES fp32 adders side by side, LANES
// entries per cycle, so a call takes N/LANES cycles (plus one to finish).
// Interface: pulse start with a and b valid and held; done pulses when out is
// complete; out holds until the next start.
// The paper lists the residual add as its own pipelined loop; the number of
// lanes is this design's choice.
module residual_add
  import fp32_pkg::*;
#(
  parameter int N     = 768,
  parameter int LANES = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp32_t a   [N],
  input  fp32_t b   [N],
  output logic  done,
  output fp32_t out [N]
);
  localparam int STEPS = N / LANES;
  logic                      busy;
  logic [$clog2(STEPS+1)-1:0] s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; s <= '0; done <= 1'b0;
      for (int i = 0; i < N; i++) out[i] <= FP_ZERO;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        s <= '0;
      end else if (busy) begin
        for (int l = 0; l < LANES; l++)
          out[(int'(s) * LANES + l) % N] <= fp_add(a[(int'(s) * LANES + l) % N],
                                                   b[(int'(s) * LANES + l) % N]);
        s <= s + 1'b1;
        if (int'(s) == STEPS - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
