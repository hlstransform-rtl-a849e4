// tb_fp32_pkg: self-checking test of the fp32_pkg functions (add, sub, mul, int and
// fixed-point conversions, compare) against double-precision arithmetic on random
// operands spanning many binades. Results must be within half an fp32 ulp-ish
// relative bound (2^-23) of the exact value.
module tb_fp32_pkg;
  import fp32_pkg::*;
  int checks = 0, failures = 0;

  function automatic real rnd_real();
    real m;
    int  e;
    m = (real'($urandom % 2000001) - 1000000.0) / 1000000.0;
    e = int'($urandom % 40) - 20;
    return m * (2.0 ** e);
  endfunction

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  task automatic check_close(input string what, input real got, input real exp_v, input real rel);
    checks++;
    if (rabs(got - exp_v) > rel * rabs(exp_v) + 1e-30) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %g expected %g", what, got, exp_v);
    end
  endtask

  initial begin
    real a, b;
    fp32_t fa, fb;
    for (int i = 0; i < 3000; i++) begin
      a = rnd_real(); b = rnd_real();
      fa = real_to_fp(a); fb = real_to_fp(b);
      a = fp_to_real(fa); b = fp_to_real(fb);
      check_close("add", fp_to_real(fp_add(fa, fb)), a + b, 1.2e-7);
      check_close("sub", fp_to_real(fp_sub(fa, fb)), a - b, 1.2e-7);
      check_close("mul", fp_to_real(fp_mul(fa, fb)), a * b, 1.2e-7);
      checks++;
      if (fp_gt(fa, fb) != (a > b)) begin
        failures++;
        $display("FAIL gt %g %g", a, b);
      end
    end
    // exact cancellation and zero handling
    checks++; if (fp_add(32'h3f80_0000, 32'hbf80_0000) != FP_ZERO) failures++;
    checks++; if (fp_mul(32'h4000_0000, FP_ZERO) != FP_ZERO) failures++;
    checks++; if (fp_add(32'h7f7f_ffff, 32'h7f7f_ffff) != FP_INF) failures++;
    for (int i = 0; i < 1000; i++) begin
      int v;
      v = int'($urandom) >>> ($urandom % 31);
      check_close("from_int", fp_to_real(fp_from_int(v)), real'(v), 6e-8);
      a = (real'($urandom % 40000) - 20000.0) / 128.0;
      fa = real_to_fp(a);
      checks++;
      // C roundf: half away from zero, saturate at 127
      begin
        int e;
        e = (a >= 0.0) ? $rtoi(a + 0.5) : -$rtoi(-a + 0.5);
        if (e > 127) e = 127;
        if (e < -127) e = -127;
        if (fp_to_int_round(fa, 127) != e) begin
          failures++;
          $display("FAIL round %g -> %0d expected %0d", a, fp_to_int_round(fa, 127), e);
        end
      end
      checks++;
      begin
        int e;
        real s;
        s = a * 256.0;
        e = $rtoi(s);
        if (real'(e) > s) e = e - 1;
        if (s < 0.0 && real'(e) != s && real'(e) > s - 1.0 && $rtoi(s) == e) e = e;
        if (fp_to_fixed_floor(fa, 8) != ((s < 0.0 && real'($rtoi(s)) != s) ? $rtoi(s) - 1 : $rtoi(s))) begin
          failures++;
          $display("FAIL fixed %g", a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
