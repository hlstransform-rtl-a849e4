// tb_kv_cache: writes random key/value words to random addresses, keeping a copy,
// and reads them back (data one cycle after r_en); also checks that a write and a
// read in the same cycle to different words do not disturb each other.
module tb_kv_cache;
  localparam int WATCHDOG = 100000;
  localparam int L = 2, S = 16, H = 3, HS = 4, DEPTH = L * S * H, W = 32 * HS;
  localparam int AW = $clog2(DEPTH);
  `include "tb_check.svh"

  logic we = 0, r_en = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wkey = '0, wval = '0, rkey, rval;
  kv_cache #(.N_LAYERS(L), .SEQ_LEN(S), .N_KV_HEADS(H), .HEAD_SIZE(HS)) dut (
    .clk, .we, .waddr, .wkey, .wval, .r_en, .raddr, .rkey, .rval);

  logic [W-1:0] mk [DEPTH], mv [DEPTH];
  bit           written [DEPTH];

  function automatic logic [W-1:0] rword();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    int a;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wkey = rword(); wval = rword();
      mk[i] = wkey; mv[i] = wval; written[i] = 1;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 400; i++) begin
      a = int'($urandom % DEPTH);
      @(negedge clk);
      r_en = 1; raddr = AW'(a);
      // overwrite another word in the same cycle
      we = 1; waddr = AW'((a + 1) % DEPTH); wkey = rword(); wval = rword();
      mk[(a + 1) % DEPTH] = wkey; mv[(a + 1) % DEPTH] = wval;
      @(negedge clk);
      r_en = 0; we = 0;
      check_true("key", rkey == mk[a]);
      check_true("value", rval == mv[a]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
