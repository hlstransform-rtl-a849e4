// tb_matmul_q8: random int8 matrices with random group scales and random quantised
// inputs, for n = 128 and n = 256 columns. Every output row must match the double
// reference sum_g dot_g * ws * xs; rows must come out in order. With a gap-free
// stream a d x n product must finish within d*(rs_scale(n)+n/64) + 3 cycles (one
// beat per cycle, two pipeline stages).
module tb_matmul_q8;
  import fp32_pkg::*;
  import llama_pkg::*;
  localparam int WATCHDOG = 200000;
  localparam int NMAX = 256;
  localparam int DMAX = 24;
  `include "tb_check.svh"

  logic start = 0, in_valid = 0, in_ready, out_valid, done;
  logic [15:0] n = 0;
  logic [31:0] d = 0, out_idx;
  logic signed [7:0] xq [NMAX];
  fp32_t xs [NMAX/GS], out_data;
  beat_t in_data = '0;
  matmul_q8 #(.NMAX(NMAX)) dut (.clk, .rst_n, .start, .n, .d, .xq, .xs, .in_valid, .in_ready,
    .in_data, .out_valid, .out_idx, .out_data, .done);

  logic signed [7:0] w [DMAX][NMAX];
  fp32_t wsc [DMAX][NMAX/GS];
  real   expv [DMAX];
  int    next_row;

  always @(posedge clk) if (out_valid) begin
    check_true("row order", int'(out_idx) == next_row);
    check_close("row", out_data, expv[out_idx % DMAX], 1e-5, 1e-6);
    next_row++;
  end

  initial begin
    int cyc, nn, dd;
    real acc;
    longint dot;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 8; r++) begin
      nn = (r % 2) ? 128 : 256;
      dd = 5 + int'($urandom % (DMAX - 5));
      for (int i = 0; i < NMAX; i++) xq[i] = 8'(int'($urandom % 255) - 127);
      for (int g = 0; g < NMAX/GS; g++) xs[g] = real_to_fp(rnd(0.001, 0.1));
      for (int i = 0; i < dd; i++) begin
        acc = 0.0;
        for (int g = 0; g < nn/GS; g++) begin
          wsc[i][g] = real_to_fp(rnd(0.0001, 0.01));
          dot = 0;
          for (int k = 0; k < GS; k++) begin
            w[i][g*GS+k] = 8'(int'($urandom % 255) - 127);
            dot += longint'(w[i][g*GS+k]) * longint'(xq[g*GS+k]);
          end
          acc += real'(dot) * fp_to_real(wsc[i][g]) * fp_to_real(xs[g]);
        end
        expv[i] = acc;
      end
      n = 16'(nn);
      d = 32'(dd);
      next_row = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      for (int i = 0; i < dd; i++)
        for (int b = 0; b < row_beats(nn); b++) begin
          if (r >= 4) while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); cyc++; end
          in_data = '0;
          if (b < rs_scale(nn)) begin
            for (int j = 0; j < 16; j++) if (b*16+j < nn/GS) in_data[32*j +: 32] = wsc[i][b*16+j];
          end else begin
            for (int k = 0; k < GS; k++) in_data[8*k +: 8] = w[i][(b - rs_scale(nn))*GS + k];
          end
          in_valid = 1;
          check_true("in_ready", in_ready);
          @(negedge clk);
          cyc++;
        end
      in_valid = 0;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      check_true("all rows", next_row == dd);
      if (r < 4) begin
        check_true("cycle count", cyc <= dd * row_beats(nn) + 3);
        $display("d=%0d n=%0d: %0d cycles (%0d beats)", dd, nn, cyc, dd * row_beats(nn));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
