// axi_burst_reader: streams a run of consecutive 512-bit weight beats out of
// off-chip memory over two 256-bit AXI4 read ports.
//
// Global memory is split over N_PORTS channels; beat b of the weight image keeps its
// bytes [32p +: 32] in channel p at byte address b*32. The reader therefore sends the
// same INCR burst to every port and joins their read-data beats side by side, which
// gives 64 int8 weights per cycle (the "widening" of the AXI ports). A command
// (base beat, number of beats) is cut into bursts of at most MAX_BURST beats that
// never cross a MAX_BURST-aligned boundary (so never a 4 KB page), and up to
// MAX_OUTSTANDING bursts are kept in flight so memory latency is hidden between
// bursts. Read responses are checked: a non-OKAY RRESP sets rd_error.
// Interface: cmd_valid/cmd_ready handshake with cmd_base and cmd_len (beats);
// out_valid/out_ready stream of beats with out_last on the final beat of the
// command. A new command is accepted only when the previous one has been delivered.
// The AXI4 subset used is AR (addr, len, size, burst, valid, ready) and R (data,
// resp, last, valid, ready). Splitting into channels and the burst size are this
// design's choices; the paper gives the port width and the 64 weights per cycle.
module axi_burst_reader
#(
  parameter int AXI_DW          = llama_pkg::AXI_DW,
  parameter int N_PORTS         = llama_pkg::N_PORTS,
  parameter int ADDR_W          = 40,
  parameter int MAX_BURST       = 64,
  parameter int MAX_OUTSTANDING = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // command
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  logic [31:0]               cmd_base,
  input  logic [31:0]               cmd_len,
  // AXI4 read address channels
  output logic [ADDR_W-1:0]         m_araddr  [N_PORTS],
  output logic [7:0]                m_arlen   [N_PORTS],
  output logic [2:0]                m_arsize  [N_PORTS],
  output logic [1:0]                m_arburst [N_PORTS],
  output logic                      m_arvalid [N_PORTS],
  input  logic                      m_arready [N_PORTS],
  // AXI4 read data channels
  input  logic [AXI_DW-1:0]         m_rdata   [N_PORTS],
  input  logic [1:0]                m_rresp   [N_PORTS],
  input  logic                      m_rlast   [N_PORTS],
  input  logic                      m_rvalid  [N_PORTS],
  output logic                      m_rready  [N_PORTS],
  // joined beat stream
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [AXI_DW*N_PORTS-1:0] out_data,
  output logic                      out_last,
  output logic                      busy,
  output logic                      rd_error
);
  localparam int BYTES = AXI_DW / 8;

  logic [31:0] ar_next;        // next beat address to request
  logic [31:0] ar_left;        // beats not yet requested
  logic [31:0] r_left;         // beats not yet delivered
  logic [N_PORTS-1:0] ar_done; // this burst's AR accepted by port p
  logic [$clog2(MAX_OUTSTANDING+1)-1:0] outstanding;
  logic        issuing;

  logic [31:0] burst_len;
  logic [31:0] to_boundary;
  always_comb begin
    to_boundary = 32'(MAX_BURST) - (ar_next % 32'(MAX_BURST));
    burst_len   = (ar_left < to_boundary) ? ar_left : to_boundary;
  end

  logic all_rvalid, all_rlast, r_fire, ar_fire_all;
  always_comb begin
    all_rvalid = 1'b1;
    all_rlast  = 1'b1;
    for (int p = 0; p < N_PORTS; p++) begin
      all_rvalid = all_rvalid & m_rvalid[p];
      all_rlast  = all_rlast & m_rlast[p];
    end
    r_fire      = all_rvalid && out_ready && busy;
    issuing     = busy && ar_left != 0 && int'(outstanding) < MAX_OUTSTANDING;
    ar_fire_all = 1'b1;
    for (int p = 0; p < N_PORTS; p++)
      ar_fire_all = ar_fire_all & (ar_done[p] | m_arready[p]);
    ar_fire_all = ar_fire_all & issuing;
  end

  always_comb begin
    for (int p = 0; p < N_PORTS; p++) begin
      m_araddr[p]  = ADDR_W'(ar_next) * ADDR_W'(BYTES);
      m_arlen[p]   = 8'(burst_len - 1);
      m_arsize[p]  = 3'($clog2(BYTES));
      m_arburst[p] = 2'b01;                       // INCR
      m_arvalid[p] = issuing && !ar_done[p];
      m_rready[p]  = busy && out_ready && all_rvalid;
      out_data[p*AXI_DW +: AXI_DW] = m_rdata[p];
    end
    out_valid = busy && all_rvalid;
    out_last  = r_left == 32'd1;
    cmd_ready = !busy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; ar_next <= '0; ar_left <= '0; r_left <= '0;
      ar_done <= '0; outstanding <= '0; rd_error <= 1'b0;
    end else begin
      if (cmd_valid && cmd_ready && cmd_len != 0) begin
        busy    <= 1'b1;
        ar_next <= cmd_base;
        ar_left <= cmd_len;
        r_left  <= cmd_len;
        ar_done <= '0;
      end else if (busy) begin
        if (ar_fire_all) begin
          ar_done <= '0;
          ar_next <= ar_next + burst_len;
          ar_left <= ar_left - burst_len;
        end else begin
          for (int p = 0; p < N_PORTS; p++)
            if (m_arvalid[p] && m_arready[p]) ar_done[p] <= 1'b1;
        end
        outstanding <= outstanding + $bits(outstanding)'(ar_fire_all)
                                   - $bits(outstanding)'(r_fire && all_rlast);
        if (r_fire) begin
          for (int p = 0; p < N_PORTS; p++)
            if (m_rresp[p] != 2'b00) rd_error <= 1'b1;
          r_left <= r_left - 1;
          if (r_left == 32'd1) busy <= 1'b0;
        end
      end
    end
  end

  // AXI4 rule: a valid address stays valid and stable until it is accepted.
  for (genvar p = 0; p < N_PORTS; p++) begin : g_axi_rules
    assert property (@(posedge clk) disable iff (!rst_n)
                     m_arvalid[p] && !m_arready[p] |=> m_arvalid[p] && $stable(m_araddr[p]))
      else $error("AR channel %0d changed before handshake", p);
  end
  // The ports return the bursts in the same order, so their last beats line up.
  assert property (@(posedge clk) disable iff (!rst_n)
                   r_fire |-> (all_rlast || !m_rlast[0]))
    else $error("read ports out of step");
endmodule
