// tb_attention: fills a key/value cache (2 layers, 8 positions, 2 key/value heads
// shared by 4 query heads of size 8) with random vectors, then runs attention for
// several layers and positions (0, 7 and random ones) and checks every output
// against a double-precision softmax(q.k/sqrt(8)) . v with grouped-query sharing.
module tb_attention;
  import fp32_pkg::*;
  localparam int WATCHDOG = 400000;
  localparam int L = 2, S = 8, NH = 4, NKV = 2, HS = 8, DIM = NH * HS;
  localparam int AW = $clog2(L * S * NKV), W = 32 * HS;
  `include "tb_check.svh"

  logic start = 0, done, r_en, we = 0;
  logic [7:0] layer = 0;
  logic [15:0] pos = 0;
  fp32_t q [DIM], xb [DIM];
  logic [AW-1:0] raddr, waddr = '0;
  logic [W-1:0] rkey, rval, wkey = '0, wval = '0;

  attention #(.N_LAYERS(L), .SEQ_LEN(S), .N_HEADS(NH), .N_KV_HEADS(NKV), .HEAD_SIZE(HS)) dut (
    .clk, .rst_n, .start, .layer, .pos, .q, .r_en, .raddr, .rkey, .rval, .done, .xb);
  kv_cache #(.N_LAYERS(L), .SEQ_LEN(S), .N_KV_HEADS(NKV), .HEAD_SIZE(HS)) cache (
    .clk, .we, .waddr, .wkey, .wval, .r_en, .raddr, .rkey, .rval);

  real kr [L][S][NKV][HS], vr [L][S][NKV][HS];

  initial begin
    real sc [S], m, sum, o;
    int kh;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < L; l++)
      for (int t = 0; t < S; t++)
        for (int h = 0; h < NKV; h++) begin
          for (int j = 0; j < HS; j++) begin
            wkey[32*j +: 32] = real_to_fp(rnd(-3.0, 3.0));
            wval[32*j +: 32] = real_to_fp(rnd(-1.0, 1.0));
            kr[l][t][h][j] = fp_to_real(wkey[32*j +: 32]);
            vr[l][t][h][j] = fp_to_real(wval[32*j +: 32]);
          end
          @(negedge clk);
          we = 1;
          waddr = AW'((l * S + t) * NKV + h);
          @(negedge clk);
          we = 0;
        end
    for (int r = 0; r < 10; r++) begin
      layer = 8'(r % L);
      pos = (r == 0) ? 16'd0 : (r == 1) ? 16'(S - 1) : 16'($urandom % S);
      for (int i = 0; i < DIM; i++) q[i] = real_to_fp(rnd(-2.0, 2.0));
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      for (int h = 0; h < NH; h++) begin
        kh = h / (NH / NKV);
        m = -1e30;
        for (int t = 0; t <= pos; t++) begin
          sc[t] = 0.0;
          for (int j = 0; j < HS; j++) sc[t] += fp_to_real(q[h*HS+j]) * kr[layer][t][kh][j];
          sc[t] = sc[t] / $sqrt(real'(HS));
          if (sc[t] > m) m = sc[t];
        end
        sum = 0.0;
        for (int t = 0; t <= pos; t++) begin sc[t] = $exp(sc[t] - m); sum += sc[t]; end
        for (int j = 0; j < HS; j++) begin
          o = 0.0;
          for (int t = 0; t <= pos; t++) o += sc[t] / sum * vr[layer][t][kh][j];
          check_close("attention out", xb[h*HS+j], o, 0.0, 2e-5);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
