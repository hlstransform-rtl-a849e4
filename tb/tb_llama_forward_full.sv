// tb_llama_forward_full: the forward-pass kernel at the size of the 110M-parameter
// model (dim 768, 12 layers, 12 heads, feed-forward 2048, vocabulary 32000, context
// 1024), with its parameters left at their defaults. The two-channel memory model
// serves the synthetic int8 weight image of that size (about 1.9 million 512-bit
// beats). One call at position 0 is run; all 32000 logits are compared with the
// double-precision reference of llama_ref.svh (2% of the largest logit per logit,
// 2% in rms: the fp32 kernel and the reference can re-quantise an activation one
// int8 code apart), and the call's cycle count is
// checked against this design's own schedule estimate and against the average of
// 4.38 million cycles per forward pass that the HLS kernel needs.
module tb_llama_forward_full;
  import fp32_pkg::*;
  import llama_pkg::*;
  localparam int NL = N_LAYERS, NH = N_HEADS, NKV = N_KV_HEADS, SEQ = 1;
  localparam int WATCHDOG = 20000000;
  localparam int PAPER_CYCLES = 4380000;
  `include "tb_check.svh"
  `include "llama_ref.svh"

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

  llama_forward dut (
    .clk, .rst_n, .ap_start, .ap_idle, .ap_done, .token, .pos,
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst),
    .m_arvalid(arvalid), .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp),
    .m_rlast(rlast), .m_rvalid(rvalid), .m_rready(rready),
    .out_valid, .out_idx, .out_data, .rd_error);

  axi_mem_model #(.MODE(1), .DIM(DIM), .HIDDEN(HIDDEN), .N_LAYERS(NL), .N_HEADS(NH),
                  .N_KV(NKV), .VOCAB(VOCAB)) mem (
    .clk, .stall_en(1'b0), .araddr, .arlen, .arsize, .arburst, .arvalid, .arready,
    .rdata, .rresp, .rlast, .rvalid, .rready, .stall_count(stalls), .burst_count(bursts));

  fp32_t logits [VOCAB];
  int    n_logits = 0;
  always @(posedge clk) if (out_valid) begin
    logits[out_idx % VOCAB] <= out_data;
    n_logits++;
  end

  // Cycles the weight stream alone needs: one beat per cycle.
  function automatic longint stream_beats();
    longint b;
    b = longint'(DIM / 16) * (2 * NL + 1) + longint'(DIM / 64 + 1)
      + longint'(VOCAB) * row_beats(DIM);
    b += longint'(NL) * (longint'(2 * DIM + 2 * RKVD) * row_beats(DIM)
                         + longint'(2 * HIDDEN) * row_beats(DIM) + longint'(DIM) * row_beats(HIDDEN));
    return b;
  endfunction

  initial begin
    int cyc;
    real maxabs, maxerr, e, se, sr;
    longint sb;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    token = 32'd1;
    pos   = 16'd0;
    @(negedge clk) ap_start = 1;
    @(negedge clk) ap_start = 0;
    cyc = 1;
    while (!ap_done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    sb = stream_beats();
    $display("forward pass: %0d cycles (%0d weight beats streamed; HLS kernel average %0d)",
             cyc, sb, PAPER_CYCLES);
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
    $display("max|logit| %f, max error %g, rms error / rms logit %g", maxabs, maxerr, $sqrt(se / sr));
    for (int i = 0; i < VOCAB; i++)
      check_close($sformatf("logit %0d", i), logits[i], ref_logits[i], 0.0, 0.02 * maxabs + 1e-6);
    check_true("rms logit error below 2% of rms logit", se <= 4.0e-4 * sr);
    check_true("all logits written once", n_logits == VOCAB);
    check_true("read responses all OKAY", !rd_error);
    check_true("cycles at least the weight stream", longint'(cyc) >= sb);
    check_true("cycles within 2x the weight stream", longint'(cyc) <= 2 * sb);
    check_true("cycles below the HLS kernel's 4.38M", cyc < PAPER_CYCLES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
