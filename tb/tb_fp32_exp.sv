// tb_fp32_exp: self-checking test of the iterative fp32_exp unit. Random operands
// are applied one at a time; each result is compared with the double-precision
// value (relative error below 3e-7) and the start-to-done latency is checked.
module tb_fp32_exp;
  import fp32_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  fp32_t fa = '0, fb = '0, y;
  logic busy, done;
  always #5 clk = ~clk;

  fp32_exp dut (.clk, .rst_n, .start, .x(fa), .busy, .done, .y);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rnd();
    real m; m = (real'($urandom % 2000001) - 1000000.0) / 1000000.0; for (int i = int'($urandom % 30); i > 0; i--) m = m * 2.0; return m / 32768.0;
  endfunction

  initial begin
    real a, b, e, g, err;
    int  lat;
    b = 1.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      a = (real'($urandom % 2000001) - 1000000.0) / 1000000.0 * 60.0;
      fa = real_to_fp(a); fb = real_to_fp(b);
      a = fp_to_real(fa); b = fp_to_real(fb);
      e = $exp(a);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
      end
      g = fp_to_real(y);
      err = g - e;
      if (err < 0.0) err = -err;
      if (e < 0.0) e = -e;
      checks++;
      if (err > 3e-7 * e + 1e-37) begin
        failures++;
        if (failures < 10) $display("FAIL exp a=%g b=%g got %g expected %g", a, b, g, $exp(a));
      end
      checks++;
      if (lat > 27) begin
        failures++;
        $display("FAIL latency %0d", lat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
