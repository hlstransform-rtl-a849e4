// Shared checking helpers for the block testbenches: counters, a relative/absolute
// tolerance compare of an fp32 result against a double-precision reference, and
// a clock with a watchdog that fails the test after WATCHDOG cycles.
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;                 // a real falling edge starts the async reset
  always #5 clk = ~clk;

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic real rnd(input real lo, input real hi);
    return lo + (hi - lo) * (real'($urandom % 1000000) / 1000000.0);
  endfunction

  task automatic check_close(input string what, input fp32_pkg::fp32_t got, input real ref_v,
                             input real rel, input real abs_tol);
    real g;
    g = fp32_pkg::fp_to_real(got);
    checks++;
    if (rabs(g - ref_v) > rel * rabs(ref_v) + abs_tol) begin
      failures++;
      if (failures <= 10) $display("FAIL %s: got %g expected %g", what, g, ref_v);
    end
  endtask

  task automatic check_true(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
