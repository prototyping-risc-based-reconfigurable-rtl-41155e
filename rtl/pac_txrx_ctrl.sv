// pac_txrx_ctrl: TxRx controller of the packet controller (PAC).
//
// Turns programmed-I/O register accesses from the AXI4-Lite bus into packet
// streams and back. The CPU transmits a packet by writing TX_META (length
// and destination port, the low 64 bits of the stream tuser), then, per
// 64-bit word, optionally TX_CTRL (byte strobe and last flag of the next
// word) and TX_DATA (the word, which becomes one stream beat towards the
// Tx-FIFO). After a last word TX_CTRL returns to "all bytes, not last".
// The CPU receives by reading RX_META (length and source port of the head
// packet in the Rx-FIFO), then per word RX_CTRL (strobe, last, valid of the
// head word) and RX_DATA (the word; the read removes it).
//
// Register map (byte offsets, 64-bit registers):
//   0x00 TX_META  W   [15:0] length, [23:16] source, [31:24] destination
//   0x08 TX_CTRL  RW  [7:0] strobe of next word, [8] next word is last
//   0x10 TX_DATA  W   data word; the write stalls while the Tx-FIFO is full
//   0x20 RX_META  R   [15:0] length, [23:16] source, [31:24] destination
//   0x28 RX_CTRL  R   [7:0] strobe, [8] last, [9] word valid
//   0x30 RX_DATA  R   data word (0 if none), pops it
//   0x38 STATUS   RW  [0] packet waiting (R), [1] Tx-FIFO ready (R),
//                     [2] interrupt enable (RW), [15:8] packets waiting (R)
// irq (Int1 of the CPU) is high while a complete packet waits and the
// interrupt is enabled. Writes complete in the cycle both AW and W are
// valid (B follows one cycle later); reads answer one cycle after AR.
// The register-based PIO scheme follows the architecture; the map, the
// word size and the interrupt level behaviour are this design's choices.
module pac_txrx_ctrl
  import netsoc_pkg::*;
#(
  parameter int AXI_DATA_W = 64,
  parameter int ADDR_W     = 16,
  parameter int USER_W     = 128,
  localparam int STRB_W = AXI_DATA_W / 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // AXI4-Lite slave
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
  // stream to Tx-FIFO
  output logic [AXI_DATA_W-1:0] tx_tdata,
  output logic [STRB_W-1:0]     tx_tkeep,
  output logic [USER_W-1:0]     tx_tuser,
  output logic                  tx_tlast,
  output logic                  tx_tvalid,
  input  logic                  tx_tready,
  // stream from Rx-FIFO
  input  logic [AXI_DATA_W-1:0] rx_tdata,
  input  logic [STRB_W-1:0]     rx_tkeep,
  input  logic [USER_W-1:0]     rx_tuser,
  input  logic                  rx_tlast,
  input  logic                  rx_tvalid,
  output logic                  rx_tready,
  input  logic [15:0]           rx_len,
  input  logic [7:0]            rx_pkts,
  output logic                  irq
);

  localparam logic [2:0] R_TX_META = 3'd0, R_TX_CTRL = 3'd1, R_TX_DATA = 3'd2,
                         R_RX_META = 3'd4, R_RX_CTRL = 3'd5, R_RX_DATA = 3'd6,
                         R_STATUS  = 3'd7;

  logic [63:0]       tx_meta;
  logic [STRB_W-1:0] tx_strb;
  logic              tx_last_q;
  logic              irq_en;

  wire [2:0] waddr = s_axil_awaddr[5:3];
  wire [2:0] raddr = s_axil_araddr[5:3];
  wire       wreq  = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  wire       is_tx = (waddr == R_TX_DATA);
  wire       wdo   = wreq && (!is_tx || tx_tready);

  assign s_axil_awready = wdo;
  assign s_axil_wready  = wdo;
  assign s_axil_bresp   = RESP_OKAY;
  assign s_axil_rresp   = RESP_OKAY;

  // Tx stream: the TX_DATA write itself is the beat
  assign tx_tvalid = wreq && is_tx;
  assign tx_tdata  = s_axil_wdata;
  assign tx_tkeep  = tx_strb;
  assign tx_tlast  = tx_last_q;
  assign tx_tuser  = USER_W'(tx_meta);

  wire rdo = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = rdo;
  assign rx_tready = rdo && (raddr == R_RX_DATA) && rx_tvalid;

  assign irq = irq_en && (rx_pkts != '0);

  logic [63:0] rx_meta;
  always_comb begin
    rx_meta = rx_tuser[63:0];
    rx_meta[15:0] = rx_len;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tx_meta       <= '0;
      tx_strb       <= '1;
      tx_last_q     <= 1'b0;
      irq_en        <= 1'b0;
      s_axil_bvalid <= 1'b0;
    end else begin
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wdo) begin
        s_axil_bvalid <= 1'b1;
        unique case (waddr)
          R_TX_META: tx_meta <= 64'(s_axil_wdata);
          R_TX_CTRL: begin
            tx_strb   <= s_axil_wdata[STRB_W-1:0];
            tx_last_q <= s_axil_wdata[8];
          end
          R_TX_DATA: if (tx_last_q) begin
            tx_strb   <= '1;
            tx_last_q <= 1'b0;
          end
          R_STATUS:  irq_en <= s_axil_wdata[2];
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (rdo) begin
        s_axil_rvalid <= 1'b1;
        s_axil_rdata  <= '0;
        unique case (raddr)
          R_TX_META: s_axil_rdata <= AXI_DATA_W'(tx_meta);
          R_TX_CTRL: s_axil_rdata <= AXI_DATA_W'({tx_last_q, tx_strb});
          R_RX_META: s_axil_rdata <= rx_tvalid ? AXI_DATA_W'(rx_meta) : '0;
          R_RX_CTRL: s_axil_rdata <= AXI_DATA_W'({rx_tvalid, rx_tlast && rx_tvalid,
                                                  rx_tvalid ? rx_tkeep : STRB_W'(0)});
          R_RX_DATA: s_axil_rdata <= rx_tvalid ? rx_tdata : '0;
          R_STATUS:  s_axil_rdata <= AXI_DATA_W'({rx_pkts, 5'd0, irq_en, tx_tready, rx_pkts != '0});
          default:   s_axil_rdata <= '0;
        endcase
      end
    end
  end

  // AXI-Stream: a presented beat stays until accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   tx_tvalid && !tx_tready |=> tx_tvalid);

endmodule
