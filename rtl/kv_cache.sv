// kv_cache: on-chip key and value cache of the attention layers.
//
// Holds, for every layer, every position up to SEQ_LEN and every key/value head,
// the rotated key vector and the value vector of that head (HEAD_SIZE fp32 values,
// stored as one wide word so attention reads a whole head per cycle). Word address
// = (layer * SEQ_LEN + pos) * N_KV_HEADS + head. One write port stores the key and
// the value of one head at once; one read port returns the key and the value at an
// address one cycle after r_en (synchronous read, like block RAM). Contents are
// not reset: positions are written before attention reads them.
// The paper gives the model's context (1024) and layer count; that the cache sits
// on chip in this shape is this design's choice.
module kv_cache #(
  parameter int N_LAYERS   = 12,
  parameter int SEQ_LEN    = 1024,
  parameter int N_KV_HEADS = 12,
  parameter int HEAD_SIZE  = 64,
  localparam int WORD_W    = 32 * HEAD_SIZE,
  localparam int DEPTH     = N_LAYERS * SEQ_LEN * N_KV_HEADS,
  localparam int AW        = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [WORD_W-1:0] wkey,
  input  logic [WORD_W-1:0] wval,
  input  logic              r_en,
  input  logic [AW-1:0]     raddr,
  output logic [WORD_W-1:0] rkey,
  output logic [WORD_W-1:0] rval
);
  logic [WORD_W-1:0] key_mem [DEPTH];
  logic [WORD_W-1:0] val_mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      key_mem[waddr] <= wkey;
      val_mem[waddr] <= wval;
    end
    if (r_en) begin
      rkey <= key_mem[raddr];
      rval <= val_mem[raddr];
    end
  end
endmodule
