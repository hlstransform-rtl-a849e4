// tb_rmsnorm: random vectors and weights; checks out = w * x / sqrt(mean(x^2)+1e-5)
// against a double reference and the latency bound 2N + 64 cycles.
module tb_rmsnorm;
  import fp32_pkg::*;
  localparam int WATCHDOG = 200000;
  localparam int N = 96;
  `include "tb_check.svh"

  logic start = 0, done;
  fp32_t x [N], w [N], out [N];
  rmsnorm #(.N(N)) dut (.clk, .rst_n, .start, .x, .w, .done, .out);

  initial begin
    real ss, sc, amp;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      amp = (r == 0) ? 1e-4 : rnd(0.01, 30.0);
      ss = 0.0;
      for (int i = 0; i < N; i++) begin
        x[i] = real_to_fp(rnd(-amp, amp));
        w[i] = real_to_fp(rnd(0.5, 1.5));
        ss += fp_to_real(x[i]) * fp_to_real(x[i]);
      end
      sc = 1.0 / $sqrt(ss / N + 1e-5);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      for (int i = 0; i < N; i++)
        check_close("rmsnorm", out[i], fp_to_real(w[i]) * fp_to_real(x[i]) * sc, 2e-6, 1e-30);
      check_true("latency", cyc <= 2 * N + 64);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
