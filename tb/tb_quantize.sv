// tb_quantize: random activation vectors of 128 and 256 entries (one group all
// zeros); checks every int8 code against round(127 x / max|x| of its group)
// (a code may differ by one only where the exact value sits within 1e-4 of a
// rounding tie) and every group scale max|x|/127.
module tb_quantize;
  import fp32_pkg::*;
  localparam int WATCHDOG = 200000;
  localparam int NMAX = 256;
  `include "tb_check.svh"

  logic start = 0, done;
  logic [15:0] n = 0;
  fp32_t x [NMAX], s [NMAX/64];
  logic signed [7:0] q [NMAX];
  quantize #(.NMAX(NMAX)) dut (.clk, .rst_n, .start, .n, .x, .done, .q, .s);

  initial begin
    real m, e, fr;
    int  exp_q;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 16; r++) begin
      n = (r % 2) ? 16'd128 : 16'd256;
      for (int i = 0; i < NMAX; i++) x[i] = real_to_fp(rnd(-5.0, 5.0) * (1 + i % 7));
      if (r == 3) for (int i = 64; i < 128; i++) x[i] = FP_ZERO;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      for (int g = 0; g < n / 64; g++) begin
        m = 0.0;
        for (int i = 0; i < 64; i++) if (rabs(fp_to_real(x[g*64+i])) > m) m = rabs(fp_to_real(x[g*64+i]));
        check_close("scale", s[g], m / 127.0, 2e-7, 0.0);
        for (int i = 0; i < 64; i++) begin
          e = (m == 0.0) ? 0.0 : fp_to_real(x[g*64+i]) * 127.0 / m;
          exp_q = (e >= 0.0) ? $rtoi(e + 0.5) : -$rtoi(-e + 0.5);
          fr = rabs(e) - $floor(rabs(e));
          checks++;
          if (q[g*64+i] != exp_q && !(rabs(fr - 0.5) < 1e-4 && (q[g*64+i] - exp_q == 1 || exp_q - q[g*64+i] == 1))) begin
            failures++;
            if (failures < 10) $display("FAIL q[%0d]=%0d expected %0d (%f)", g*64+i, q[g*64+i], exp_q, e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
