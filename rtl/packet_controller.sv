// packet_controller: the PAC, the bridge between the packet data plane and
// the AXI control plane.
//
// Packets from the input arbiter are collected whole in the Rx-FIFO; the
// interrupt (Int1) tells the CPU one is waiting and the CPU reads it word by
// word through the TxRx controller's registers. Packets the CPU writes the
// same way are collected whole in the Tx-FIFO and only then streamed to the
// output arbiter. No packet processing happens here. The split into
// Tx-FIFO, Rx-FIFO and TxRx controller behind one 64-bit AXI slave follows
// the architecture; see pac_txrx_ctrl for the register map and
// axis_pkt_fifo for the FIFO behaviour.
module packet_controller
  import netsoc_pkg::*;
#(
  parameter int AXI_DATA_W = 64,
  parameter int ADDR_W     = 16,
  parameter int FIFO_DEPTH = 512,
  parameter int FIFO_PKTS  = 32,
  localparam int DW = STREAM_DATA_W,
  localparam int KW = STREAM_KEEP_W,
  localparam int UW = STREAM_USER_W,
  localparam int STRB_W = AXI_DATA_W / 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [ADDR_W-1:0]     s_axil_awaddr,
  input  logic                  s_axil_awvalid,
  output logic                  s_axil_awready,
  input  logic [AXI_DATA_W-1:0] s_axil_wdata,
  input  logic [STRB_W-1:0]     s_axil_wstrb,
  input  logic                  s_axil_wvalid,
  output logic                  s_axil_wready,
  output logic [1:0]            s_axil_bresp,
  output logic                  s_axil_bvalid,
  input  logic                  s_axil_bready,
  input  logic [ADDR_W-1:0]     s_axil_araddr,
  input  logic                  s_axil_arvalid,
  output logic                  s_axil_arready,
  output logic [AXI_DATA_W-1:0] s_axil_rdata,
  output logic [1:0]            s_axil_rresp,
  output logic                  s_axil_rvalid,
  input  logic                  s_axil_rready,
  // ST-S from the input arbiter
  input  logic [DW-1:0]         s_rx_tdata,
  input  logic [KW-1:0]         s_rx_tkeep,
  input  logic [UW-1:0]         s_rx_tuser,
  input  logic                  s_rx_tlast,
  input  logic                  s_rx_tvalid,
  output logic                  s_rx_tready,
  // ST-M to the output arbiter
  output logic [DW-1:0]         m_tx_tdata,
  output logic [KW-1:0]         m_tx_tkeep,
  output logic [UW-1:0]         m_tx_tuser,
  output logic                  m_tx_tlast,
  output logic                  m_tx_tvalid,
  input  logic                  m_tx_tready,
  output logic                  irq
);

  logic [DW-1:0] t_tdata, r_tdata;
  logic [KW-1:0] t_tkeep, r_tkeep;
  logic [UW-1:0] t_tuser, r_tuser;
  logic          t_tlast, t_tvalid, t_tready, r_tlast, r_tvalid, r_tready;
  logic [15:0]   r_len, t_len_unused;
  logic [$clog2(FIFO_PKTS):0] r_pkts, t_pkts_unused;

  pac_txrx_ctrl #(.AXI_DATA_W(AXI_DATA_W), .ADDR_W(ADDR_W), .USER_W(UW)) u_ctrl (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .tx_tdata(t_tdata), .tx_tkeep(t_tkeep), .tx_tuser(t_tuser), .tx_tlast(t_tlast),
    .tx_tvalid(t_tvalid), .tx_tready(t_tready),
    .rx_tdata(r_tdata), .rx_tkeep(r_tkeep), .rx_tuser(r_tuser), .rx_tlast(r_tlast),
    .rx_tvalid(r_tvalid), .rx_tready(r_tready),
    .rx_len(r_len), .rx_pkts(8'(r_pkts)), .irq
  );

  // Tx-FIFO: CPU -> output arbiter
  axis_pkt_fifo #(.DATA_W(DW), .USER_W(UW), .DEPTH(FIFO_DEPTH), .PKTS(FIFO_PKTS)) u_tx_fifo (
    .clk, .rst_n,
    .s_tdata(t_tdata), .s_tkeep(t_tkeep), .s_tuser(t_tuser), .s_tlast(t_tlast),
    .s_tvalid(t_tvalid), .s_tready(t_tready),
    .m_tdata(m_tx_tdata), .m_tkeep(m_tx_tkeep), .m_tuser(m_tx_tuser), .m_tlast(m_tx_tlast),
    .m_tvalid(m_tx_tvalid), .m_tready(m_tx_tready),
    .m_len(t_len_unused), .pkt_count(t_pkts_unused)
  );

  // Rx-FIFO: input arbiter -> CPU
  axis_pkt_fifo #(.DATA_W(DW), .USER_W(UW), .DEPTH(FIFO_DEPTH), .PKTS(FIFO_PKTS)) u_rx_fifo (
    .clk, .rst_n,
    .s_tdata(s_rx_tdata), .s_tkeep(s_rx_tkeep), .s_tuser(s_rx_tuser), .s_tlast(s_rx_tlast),
    .s_tvalid(s_rx_tvalid), .s_tready(s_rx_tready),
    .m_tdata(r_tdata), .m_tkeep(r_tkeep), .m_tuser(r_tuser), .m_tlast(r_tlast),
    .m_tvalid(r_tvalid), .m_tready(r_tready),
    .m_len(r_len), .pkt_count(r_pkts)
  );

endmodule
