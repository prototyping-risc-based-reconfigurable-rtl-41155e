// axis_pkt_fifo: store-and-forward AXI4-Stream packet FIFO.
//
// Beats are written into a DEPTH-entry data FIFO. While a packet comes in,
// its byte count (sum of tkeep bits) is accumulated and the tuser of its
// first beat is kept; when the tlast beat is accepted, {tuser, length} is
// pushed into a small per-packet FIFO of PKTS entries. The read side shows
// a packet only once it is complete (per-packet FIFO not empty), so a
// packet leaves without gaps once it starts. m_tuser is the tuser of the
// head packet's first beat, m_len its byte count, pkt_count the number of
// complete packets stored. A packet must fit in DEPTH beats.
//
// This is the Tx-FIFO and Rx-FIFO of the packet controller and the receive
// buffer of the 10GbE port. Store-and-forward release and the sizes are
// choices of this design.
module axis_pkt_fifo #(
  parameter int DATA_W = 64,
  parameter int USER_W = 128,
  parameter int DEPTH  = 512,
  parameter int PKTS   = 32,
  localparam int KEEP_W = DATA_W / 8,
  localparam int PW     = $clog2(PKTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] s_tdata,
  input  logic [KEEP_W-1:0] s_tkeep,
  input  logic [USER_W-1:0] s_tuser,
  input  logic              s_tlast,
  input  logic              s_tvalid,
  output logic              s_tready,
  output logic [DATA_W-1:0] m_tdata,
  output logic [KEEP_W-1:0] m_tkeep,
  output logic [USER_W-1:0] m_tuser,
  output logic              m_tlast,
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic [15:0]       m_len,
  output logic [PW:0]       pkt_count
);

  logic d_full, d_empty, i_full, i_empty;
  logic [$clog2(DEPTH):0] d_count;
  logic [DATA_W+KEEP_W:0] d_rd;
  logic [USER_W+15:0]     i_rd;

  logic [15:0]       in_len;
  logic [USER_W-1:0] in_user;
  logic              in_first;

  wire s_hs = s_tvalid && s_tready;
  wire m_hs = m_tvalid && m_tready;

  // bytes in this beat
  logic [$clog2(KEEP_W):0] beat_bytes;
  always_comb begin
    beat_bytes = '0;
    for (int i = 0; i < KEEP_W; i++) beat_bytes += ($clog2(KEEP_W)+1)'(s_tkeep[i]);
  end

  wire [15:0]       pkt_len  = (in_first ? 16'd0 : in_len) + 16'(beat_bytes);
  wire [USER_W-1:0] pkt_user = in_first ? s_tuser : in_user;

  assign s_tready = !d_full && !i_full;

  sync_fifo #(.WIDTH(DATA_W+KEEP_W+1), .DEPTH(DEPTH)) u_data (
    .clk, .rst_n,
    .push(s_hs), .wr_data({s_tlast, s_tkeep, s_tdata}),
    .pop(m_hs), .rd_data(d_rd),
    .full(d_full), .empty(d_empty), .count(d_count)
  );

  sync_fifo #(.WIDTH(USER_W+16), .DEPTH(PKTS)) u_info (
    .clk, .rst_n,
    .push(s_hs && s_tlast), .wr_data({pkt_user, pkt_len}),
    .pop(m_hs && m_tlast), .rd_data(i_rd),
    .full(i_full), .empty(i_empty), .count(pkt_count)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_first <= 1'b1;
      in_len   <= '0;
      in_user  <= '0;
    end else if (s_hs) begin
      in_first <= s_tlast;
      in_len   <= pkt_len;
      in_user  <= pkt_user;
    end
  end

  assign m_tvalid = !i_empty;
  assign {m_tlast, m_tkeep, m_tdata} = d_rd;
  assign {m_tuser, m_len} = i_rd;

`ifndef SYNTHESIS
  // a complete packet is always fully present in the data FIFO
  assert property (@(posedge clk) disable iff (!rst_n) !i_empty |-> !d_empty);
`endif

endmodule
