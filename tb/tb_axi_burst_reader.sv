// tb_axi_burst_reader: drives the weight reader against the two-channel memory model.
// Random commands (base, length) are read with random back-pressure from memory and
// from the consumer; every beat must equal the model's content at its address, in
// order, with out_last on the final beat only. A second pass without stalls checks
// the rate: len beats in at most len + latency + bursts cycles (one beat per cycle).
module tb_axi_burst_reader;
  import llama_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;                 // a real falling edge starts the async reset
  always #5 clk = ~clk;

  logic        cmd_valid = 0, cmd_ready;
  logic [31:0] cmd_base = 0, cmd_len = 0;
  logic [39:0] araddr [2];
  logic [7:0]  arlen [2];
  logic [2:0]  arsize [2];
  logic [1:0]  arburst [2];
  logic        arvalid [2], arready [2], rvalid [2], rready [2], rlast [2];
  logic [255:0] rdata [2];
  logic [1:0]  rresp [2];
  logic        out_valid, out_ready, out_last, busy, rd_error;
  beat_t       out_data;
  int          stalls, bursts;
  bit          consumer_stalls = 1;

  axi_burst_reader dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_base, .cmd_len,
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst),
    .m_arvalid(arvalid), .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp),
    .m_rlast(rlast), .m_rvalid(rvalid), .m_rready(rready),
    .out_valid, .out_ready, .out_data, .out_last, .busy, .rd_error);

  bit clean = 0;
  axi_mem_model #(.MODE(0)) mem_s (.clk, .stall_en(!clean), .araddr, .arlen, .arsize, .arburst,
    .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .stall_count(stalls), .burst_count(bursts));

  always @(posedge clk) out_ready <= consumer_stalls ? ($urandom % 5 != 0) : 1'b1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int base, input int len, output int cycles);
    int got;
    beat_t expb;
    @(negedge clk);
    cmd_base = 32'(base);
    cmd_len = 32'(len);
    cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    got = 0;
    cycles = 1;
    while (got < len) begin
      @(negedge clk);
      cycles++;
      if (out_valid && out_ready) begin
        expb = mem_s.content(base + got);
        checks++;
        if (out_data !== expb) begin
          failures++;
          if (failures < 5) $display("FAIL beat %0d of run at %0d", got, base);
        end
        checks++;
        if (out_last != (got == len - 1)) failures++;
        got++;
      end
    end
  endtask

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 30; i++) run(int'($urandom % 5000), 1 + int'($urandom % 300), cyc);
    checks++;
    if (stalls == 0 || bursts < 30) begin
      failures++;
      $display("FAIL no back-pressure exercised");
    end
    checks++;
    if (rd_error) failures++;
    // throughput without stalls
    clean = 1;
    consumer_stalls = 0;
    repeat (5) @(posedge clk);
    run(128, 1000, cyc);
    checks++;
    if (cyc > 1000 + 6 + 4 + 16) begin
      failures++;
      $display("FAIL 1000 beats took %0d cycles", cyc);
    end
    $display("rate check: 1000 beats in %0d cycles, %0d bursts with stalls seen %0d", cyc, bursts, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
