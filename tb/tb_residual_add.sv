// tb_residual_add: random vectors; checks out = a + b element by element and that
// the call takes N/LANES + 1 cycles.
module tb_residual_add;
  import fp32_pkg::*;
  localparam int WATCHDOG = 100000;
  localparam int N = 96;
  `include "tb_check.svh"

  logic start = 0, done;
  fp32_t a [N], b [N], out [N];
  residual_add #(.N(N), .LANES(16)) dut (.clk, .rst_n, .start, .a, .b, .done, .out);

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      for (int i = 0; i < N; i++) begin
        a[i] = real_to_fp(rnd(-10.0, 10.0));
        b[i] = real_to_fp(rnd(-10.0, 10.0));
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      for (int i = 0; i < N; i++)
        check_close("add", out[i], fp_to_real(a[i]) + fp_to_real(b[i]), 1.2e-7, 1e-12);
      check_true("latency", cyc == N / 16 + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
