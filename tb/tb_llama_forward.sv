// tb_llama_forward: end-to-end test of the forward-pass kernel at a reduced size
// (dim 128, hidden 256, 2 layers, 2 query heads sharing 1 key/value head of size 64,
// context 8, vocabulary 64). The weight image is served by the two-channel AXI4
// memory model with random stalls. The kernel is run for a sequence of tokens at
// positions 0..SEQ-1 (the key/value cache filling up), and every logit of every
// call is compared with the double-precision reference of llama_ref.svh. The bound
// is 2% of the largest logit per logit and 2% in rms over the vector: the kernel
// rounds in fp32, so an activation sitting close to a rounding boundary of the int8
// re-quantisation can land one code away from the reference, which moves every
// logit a little.
// It also counts the mechanisms the design relies on and fails if one never
// happened: memory back-pressure, multi-burst reads, attention over more than one
// position, grouped-query sharing, and complete logit vectors on the output.
module tb_llama_forward;
  import fp32_pkg::*;
  import llama_pkg::*;
  localparam int DIM = 128, HIDDEN = 256, NL = 2, NH = 2, NKV = 1, SEQ = 8, VOCAB = 64;
  localparam int N_CALLS = SEQ;
  localparam int WATCHDOG = 2000000;
  `include "tb_check.svh"
  `include "llama_ref.svh"

  tb_weights_pkg::cfg_t cfg;
  initial cfg = '{dim: DIM, hidden: HIDDEN, n_layers: NL, n_heads: NH, n_kv_heads: NKV, vocab: VOCAB};

  logic ap_start = 0, ap_idle, ap_done, out_valid, rd_error;
  logic [31:0] token = 0, out_idx;
  logic [15:0] pos = 0;
  fp32_t out_data;
  logic [39:0] araddr [2];
  logic [7:0]  arlen [2];
  logic [2:0]  arsize [2];
  logic [1:0]  arburst [2];
  logic        arvalid [2], arready [2], rvalid [2], rready [2], rlast [2];
  logic [255:0] rdata [2];
  logic [1:0]  rresp [2];
  int stalls, bursts;

  llama_forward #(.DIM(DIM), .HIDDEN(HIDDEN), .N_LAYERS(NL), .N_HEADS(NH), .N_KV_HEADS(NKV),
                  .SEQ_LEN(SEQ), .VOCAB(VOCAB)) dut (
    .clk, .rst_n, .ap_start, .ap_idle, .ap_done, .token, .pos,
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst),
    .m_arvalid(arvalid), .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp),
    .m_rlast(rlast), .m_rvalid(rvalid), .m_rready(rready),
    .out_valid, .out_idx, .out_data, .rd_error);

  axi_mem_model #(.MODE(1), .DIM(DIM), .HIDDEN(HIDDEN), .N_LAYERS(NL), .N_HEADS(NH),
                  .N_KV(NKV), .VOCAB(VOCAB)) mem (
    .clk, .stall_en(1'b1), .araddr, .arlen, .arsize, .arburst, .arvalid, .arready,
    .rdata, .rresp, .rlast, .rvalid, .rready, .stall_count(stalls), .burst_count(bursts));

  fp32_t logits [VOCAB];
  int    n_logits;
  always @(posedge clk) if (out_valid) begin
    logits[out_idx % VOCAB] <= out_data;
    n_logits++;
  end

  initial begin
    int cyc, multi_pos_calls, full_vectors;
    real maxabs, maxerr, e, se, sr;
    multi_pos_calls = 0;
    full_vectors = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int call = 0; call < N_CALLS; call++) begin
      token = 32'((call * 37 + 5) % VOCAB);
      pos = 16'(call);
      n_logits = 0;
      @(negedge clk) ap_start = 1;
      @(negedge clk) ap_start = 0;
      cyc = 1;
      while (!ap_done) begin @(negedge clk); cyc++; end
      ref_forward(int'(token), int'(pos));
      maxabs = 0.0;
      maxerr = 0.0;
      se = 0.0;
      sr = 0.0;
      for (int i = 0; i < VOCAB; i++) begin
        if (rabs(ref_logits[i]) > maxabs) maxabs = rabs(ref_logits[i]);
        e = rabs(fp_to_real(logits[i]) - ref_logits[i]);
        if (e > maxerr) maxerr = e;
        se += e * e;
        sr += ref_logits[i] * ref_logits[i];
      end
      for (int i = 0; i < VOCAB; i++)
        check_close($sformatf("logit %0d of call %0d", i, call), logits[i], ref_logits[i], 0.0,
                    0.02 * maxabs + 1e-6);
      check_true("rms logit error below 2% of rms logit", se <= 4.0e-4 * sr);
      if (n_logits == VOCAB) full_vectors++;
      if (pos > 0) multi_pos_calls++;
      $display("call %0d token %0d pos %0d: %0d cycles, max|logit| %f, max error %g",
               call, token, pos, cyc, maxabs, maxerr);
    end
    check_true("read responses all OKAY", !rd_error);
    $display("mechanisms: memory stalls %0d, bursts %0d, attention over >1 position %0d calls, grouped-query kv_mul %0d, complete logit vectors %0d",
             stalls, bursts, multi_pos_calls, NH / NKV, full_vectors);
    check_true("memory back-pressure seen", stalls > 0);
    check_true("multi-burst reads seen", bursts > N_CALLS * (3 + 9 * NL));
    check_true("attention over several positions", multi_pos_calls > 0);
    check_true("grouped-query sharing configured", NH / NKV > 1);
    check_true("every call wrote all logits", full_vectors == N_CALLS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
