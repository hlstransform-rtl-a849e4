// axi_mem_model: behavioural model of the off-chip weight memory, N_PORTS channels
// each behind a 256-bit AXI4 read slave. Not synthesizable.
//
// Channel p returns bytes [32p +: 32] of the 512-bit beat at each beat address, the
// beat coming either from a hash of the address (MODE 0) or from the synthetic
// Llama 2 weight image of tb_weights_pkg (MODE 1). Each channel queues up to 8
// accepted bursts and answers them in order after LATENCY cycles; arready and rvalid drop at random while stall_en is high, so the master sees back-pressure.
// stall_count counts cycles on which a channel withheld data it could have sent.
module axi_mem_model
  import llama_pkg::*;
#(
  parameter int MODE     = 0,
  parameter int N_P      = 2,
  parameter int DW       = 256,
  parameter int AW       = 40,
  parameter int LATENCY  = 6,
  parameter int DIM      = 64,
  parameter int HIDDEN   = 128,
  parameter int N_LAYERS = 2,
  parameter int N_HEADS  = 2,
  parameter int N_KV     = 1,
  parameter int VOCAB    = 32
) (
  input  logic          clk,
  input  logic          stall_en,
  input  logic [AW-1:0] araddr  [N_P],
  input  logic [7:0]    arlen   [N_P],
  input  logic [2:0]    arsize  [N_P],
  input  logic [1:0]    arburst [N_P],
  input  logic          arvalid [N_P],
  output logic          arready [N_P],
  output logic [DW-1:0] rdata   [N_P],
  output logic [1:0]    rresp   [N_P],
  output logic          rlast   [N_P],
  output logic          rvalid  [N_P],
  input  logic          rready  [N_P],
  output int            stall_count,
  output int            burst_count
);
  tb_weights_pkg::cfg_t cfg;
  initial begin
    cfg = '{dim: DIM, hidden: HIDDEN, n_layers: N_LAYERS, n_heads: N_HEADS,
            n_kv_heads: N_KV, vocab: VOCAB};
    stall_count = 0;
    burst_count = 0;
  end

  function automatic beat_t content(input int a);
    if (MODE == 1) return tb_weights_pkg::beat(cfg, a);
    return {tb_weights_pkg::mix(32'(a), 1, 2, 3), tb_weights_pkg::mix(32'(a), 4, 5, 6),
            448'(tb_weights_pkg::mix(32'(a), 7, 8, 9)) << 100};
  endfunction

  for (genvar p = 0; p < N_P; p++) begin : g_ch
    int q_addr [$];
    int q_len  [$];
    int q_time [$];
    int cur_beat, cur_left, cyc;
    logic want_stall;
    initial begin
      cur_left = 0;
      cyc = 0;
      arready[p] = 1'b0;
      rvalid[p] = 1'b0;
      rlast[p] = 1'b0;
      rresp[p] = 2'b00;
      rdata[p] = '0;
    end
    always @(posedge clk) begin
      cyc++;
      // address channel
      if (arvalid[p] && arready[p]) begin
        q_addr.push_back(int'(araddr[p] / (DW / 8)));
        q_len.push_back(int'(arlen[p]) + 1);
        q_time.push_back(cyc + LATENCY);
        if (p == 0) burst_count++;
      end
      // data channel: a valid beat is held until it is taken
      if (!(rvalid[p] && !rready[p])) begin
        if (rvalid[p] && rready[p]) begin
          cur_beat++;
          cur_left--;
        end
        if (cur_left == 0 && q_addr.size() > 0 && q_time[0] <= cyc) begin
          cur_beat = q_addr.pop_front();
          cur_left = q_len.pop_front();
          void'(q_time.pop_front());
        end
        want_stall = stall_en && ($urandom % 8 == 0);
        if (cur_left > 0 && !want_stall) begin
          beat_t bt;
          bt = content(cur_beat);
          rvalid[p] <= 1'b1;
          rdata[p]  <= bt[DW*p +: DW];
          rlast[p]  <= cur_left == 1;
        end else begin
          if (cur_left > 0) stall_count++;
          rvalid[p] <= 1'b0;
          rlast[p]  <= 1'b0;
        end
      end
      arready[p] <= (q_addr.size() < 8) && !(stall_en && ($urandom % 4 == 0));
    end
  end
endmodule
