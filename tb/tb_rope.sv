// tb_rope: random q and k at positions 0, 1, 1023 and random ones; checks every
// rotated pair against cos/sin of pos * 10000^(-2p/64) in double precision.
module tb_rope;
  import fp32_pkg::*;
  localparam int WATCHDOG = 200000;
  localparam int DIM = 128, KV = 64, HS = 64;
  `include "tb_check.svh"

  logic start = 0, done;
  logic [15:0] pos = 0;
  fp32_t q [DIM], k [KV], q_out [DIM], k_out [KV];
  rope #(.DIM(DIM), .KV_DIM(KV), .HEAD_SIZE(HS)) dut (.clk, .rst_n, .start, .pos, .q, .k, .done,
    .q_out, .k_out);

  initial begin
    real a, c, s, v0, v1;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 12; r++) begin
      pos = (r == 0) ? 16'd0 : (r == 1) ? 16'd1 : (r == 2) ? 16'd1023 : 16'($urandom % 1024);
      for (int i = 0; i < DIM; i++) q[i] = real_to_fp(rnd(-2.0, 2.0));
      for (int i = 0; i < KV; i++) k[i] = real_to_fp(rnd(-2.0, 2.0));
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      for (int i = 0; i < DIM; i += 2) begin
        a = real'(pos) * $pow(10000.0, -real'(i % HS) / HS);
        c = $cos(a);
        s = $sin(a);
        v0 = fp_to_real(q[i]); v1 = fp_to_real(q[i+1]);
        check_close("q0", q_out[i], v0 * c - v1 * s, 0.0, 2e-6);
        check_close("q1", q_out[i+1], v0 * s + v1 * c, 0.0, 2e-6);
        if (i < KV) begin
          v0 = fp_to_real(k[i]); v1 = fp_to_real(k[i+1]);
          check_close("k0", k_out[i], v0 * c - v1 * s, 0.0, 2e-6);
          check_close("k1", k_out[i+1], v0 * s + v1 * c, 0.0, 2e-6);
        end
      end
      check_true("latency", cyc <= HS / 2 * (32 + DIM / HS) + 4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
