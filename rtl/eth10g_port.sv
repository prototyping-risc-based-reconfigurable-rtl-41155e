// eth10g_port: the metadata part of one 10GbE port (receive and transmit).
//
// Receive: beats from the MAC receive stream are buffered whole in a
// store-and-forward packet FIFO, which counts the bytes of each packet.
// When the packet leaves towards the input arbiter every beat carries
// tuser = {dst 0, src = this port's one-hot code, length}, so the length
// is known on the first beat. Transmit: packets from the output arbiter go
// to the MAC transmit stream unchanged, with the metadata dropped: that
// side is plain wiring, with no added latency.
// The layer-1/2 cores (PCS, PMA, MAC) sit outside this module. That the
// port appends length and source-port metadata follows the architecture;
// buffering the whole packet to do so and using back-pressure (tready)
// towards the MAC instead of dropping are this design's choices.
module eth10g_port
  import netsoc_pkg::*;
#(
  parameter int PORT_ID    = 0,
  parameter int NUM_PORTS  = 5,   // stream ports incl. DMA, for the code
  parameter int FIFO_DEPTH = 512,
  parameter int FIFO_PKTS  = 32,
  localparam int DW = STREAM_DATA_W,
  localparam int KW = STREAM_KEEP_W,
  localparam int UW = STREAM_USER_W
) (
  input  logic          clk,
  input  logic          rst_n,
  // from MAC receive
  input  logic [DW-1:0] mac_rx_tdata,
  input  logic [KW-1:0] mac_rx_tkeep,
  input  logic          mac_rx_tlast,
  input  logic          mac_rx_tvalid,
  output logic          mac_rx_tready,
  // to input arbiter
  output logic [DW-1:0] m_tdata,
  output logic [KW-1:0] m_tkeep,
  output logic [UW-1:0] m_tuser,
  output logic          m_tlast,
  output logic          m_tvalid,
  input  logic          m_tready,
  // from output arbiter
  input  logic [DW-1:0] s_tdata,
  input  logic [KW-1:0] s_tkeep,
  input  logic [UW-1:0] s_tuser,
  input  logic          s_tlast,
  input  logic          s_tvalid,
  output logic          s_tready,
  // to MAC transmit
  output logic [DW-1:0] mac_tx_tdata,
  output logic [KW-1:0] mac_tx_tkeep,
  output logic          mac_tx_tlast,
  output logic          mac_tx_tvalid,
  input  logic          mac_tx_tready
);

  logic [UW-1:0] f_tuser;
  logic [15:0]   f_len;
  logic [$clog2(FIFO_PKTS):0] f_pkts;
  pkt_meta_t     meta;

  axis_pkt_fifo #(.DATA_W(DW), .USER_W(UW), .DEPTH(FIFO_DEPTH), .PKTS(FIFO_PKTS)) u_rx_fifo (
    .clk, .rst_n,
    .s_tdata(mac_rx_tdata), .s_tkeep(mac_rx_tkeep), .s_tuser('0), .s_tlast(mac_rx_tlast),
    .s_tvalid(mac_rx_tvalid), .s_tready(mac_rx_tready),
    .m_tdata, .m_tkeep, .m_tuser(f_tuser), .m_tlast, .m_tvalid, .m_tready,
    .m_len(f_len), .pkt_count(f_pkts)
  );

  always_comb begin
    meta      = '0;
    meta.len  = f_len;
    meta.src  = port_code(PORT_ID, NUM_PORTS);
    m_tuser   = meta;
  end

  // transmit: strip metadata
  assign mac_tx_tdata  = s_tdata;
  assign mac_tx_tkeep  = s_tkeep;
  assign mac_tx_tlast  = s_tlast;
  assign mac_tx_tvalid = s_tvalid;
  assign s_tready      = mac_tx_tready;

endmodule
