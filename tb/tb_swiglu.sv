// tb_swiglu: random inputs over [-12, 12]; checks out = h1 * sigmoid(h1) * h3
// against a double reference.
module tb_swiglu;
  import fp32_pkg::*;
  localparam int WATCHDOG = 200000;
  localparam int N = 48;
  `include "tb_check.svh"

  logic start = 0, done;
  fp32_t h1 [N], h3 [N], out [N];
  swiglu #(.N(N)) dut (.clk, .rst_n, .start, .h1, .h3, .done, .out);

  initial begin
    real a;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 10; r++) begin
      for (int i = 0; i < N; i++) begin
        h1[i] = real_to_fp(rnd(-12.0, 12.0));
        h3[i] = real_to_fp(rnd(-3.0, 3.0));
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      for (int i = 0; i < N; i++) begin
        a = fp_to_real(h1[i]);
        check_close("swiglu", out[i], a / (1.0 + $exp(-a)) * fp_to_real(h3[i]), 1e-6, 1e-30);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
