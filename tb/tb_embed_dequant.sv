// tb_embed_dequant: feeds random quantised rows (scale beats, then int8 beats, with
// random gaps) and checks every dequantised value q*scale against a double
// reference, and that a gap-free row takes rs_scale(DIM) + DIM/64 cycles.
module tb_embed_dequant;
  import fp32_pkg::*;
  import llama_pkg::*;
  localparam int WATCHDOG = 100000;
  localparam int D = 128;
  `include "tb_check.svh"

  logic start = 0, in_valid = 0, in_ready, done;
  beat_t in_data = '0;
  fp32_t x [D];
  embed_dequant #(.DIM(D)) dut (.clk, .rst_n, .start, .in_valid, .in_ready, .in_data, .done, .x);

  initial begin
    logic signed [7:0] qv [D];
    fp32_t sc [D/GS];
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      for (int g = 0; g < D/GS; g++) sc[g] = real_to_fp(rnd(0.001, 0.05));
      for (int i = 0; i < D; i++) qv[i] = 8'($urandom);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 0;
      for (int b = 0; b < rs_scale(D) + D/GS; b++) begin
        if (r % 2 == 1) while ($urandom % 3 == 0) begin in_valid = 0; @(negedge clk); cyc++; end
        in_data = '0;
        if (b < rs_scale(D)) begin
          for (int j = 0; j < 16; j++) if (b*16 + j < D/GS) in_data[32*j +: 32] = sc[b*16 + j];
        end else begin
          for (int k = 0; k < GS; k++) in_data[8*k +: 8] = qv[(b - rs_scale(D))*GS + k];
        end
        in_valid = 1;
        @(negedge clk);
        cyc++;
      end
      in_valid = 0;
      while (!done) begin @(negedge clk); cyc++; end
      for (int i = 0; i < D; i++)
        check_close("dequant", x[i], real'(qv[i]) * fp_to_real(sc[i/GS]), 1.2e-7, 0.0);
      if (r % 2 == 0) check_true("row latency", cyc <= rs_scale(D) + D/GS + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
