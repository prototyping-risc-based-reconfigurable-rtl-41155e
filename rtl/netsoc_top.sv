// netsoc_top: the NetSoC system around one RISC processor.
//
// Control plane: an AXI4-Lite interconnect (DATA_W bits) with two masters,
// the CPU (port 0, full width) and the DMA engine's host-access master
// (port 1, 32 bits, widened), and seven slaves: DDR3 controller (full
// width, outside), console, SPI, I2C, serial debugger (32 bits each),
// packet controller (64 bits) and the DMA engine's register slave (32
// bits, outside). Every slave is thus reachable by the CPU and by the host.
// Data plane: NUM_PORTS 10GbE port modules tag received packets with
// length and source port; the input arbiter merges them with the DMA
// stream into the packet controller's Rx-FIFO; the CPU reads packets by
// PIO after interrupt Int1 and writes packets into the Tx-FIFO; the output
// arbiter sends them to the ports or the DMA stream named in their
// metadata. The console drives Int0.
// The processor, the DDR3 controller, the DMA/PCIe engine and the 10GbE
// MAC/PHY cores are not part of this module; their interfaces are ports.
// Everything runs on one clock. Addresses: see netsoc_pkg. The block
// structure and the bus widths (256/64/32) follow the architecture; the
// single clock, the shared-bus interconnect and the address map are this
// design's choices.
module netsoc_top
  import netsoc_pkg::*;
#(
  parameter int NUM_PORTS  = 4,
  parameter int DATA_W     = 256,
  parameter int FIFO_DEPTH = 512,
  localparam int ADDR_W = SYS_ADDR_W,
  localparam int STRB_W = DATA_W / 8,
  localparam int DW = STREAM_DATA_W,
  localparam int KW = STREAM_KEEP_W,
  localparam int UW = STREAM_USER_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // CPU AXI master
  input  logic [ADDR_W-1:0]               cpu_awaddr,
  input  logic                            cpu_awvalid,
  output logic                            cpu_awready,
  input  logic [DATA_W-1:0]               cpu_wdata,
  input  logic [STRB_W-1:0]               cpu_wstrb,
  input  logic                            cpu_wvalid,
  output logic                            cpu_wready,
  output logic [1:0]                      cpu_bresp,
  output logic                            cpu_bvalid,
  input  logic                            cpu_bready,
  input  logic [ADDR_W-1:0]               cpu_araddr,
  input  logic                            cpu_arvalid,
  output logic                            cpu_arready,
  output logic [DATA_W-1:0]               cpu_rdata,
  output logic [1:0]                      cpu_rresp,
  output logic                            cpu_rvalid,
  input  logic                            cpu_rready,
  output logic                            cpu_int0,   // console
  output logic                            cpu_int1,   // packet controller
  // CPU debug unit byte streams
  output logic [7:0]                      dbg_to_cpu_data,
  output logic                            dbg_to_cpu_valid,
  input  logic                            dbg_to_cpu_ready,
  input  logic [7:0]                      dbg_from_cpu_data,
  input  logic                            dbg_from_cpu_valid,
  output logic                            dbg_from_cpu_ready,
  // DMA engine host-access AXI master (32 bits)
  input  logic [ADDR_W-1:0]               dma_m_awaddr,
  input  logic                            dma_m_awvalid,
  output logic                            dma_m_awready,
  input  logic [31:0]                     dma_m_wdata,
  input  logic [3:0]                      dma_m_wstrb,
  input  logic                            dma_m_wvalid,
  output logic                            dma_m_wready,
  output logic [1:0]                      dma_m_bresp,
  output logic                            dma_m_bvalid,
  input  logic                            dma_m_bready,
  input  logic [ADDR_W-1:0]               dma_m_araddr,
  input  logic                            dma_m_arvalid,
  output logic                            dma_m_arready,
  output logic [31:0]                     dma_m_rdata,
  output logic [1:0]                      dma_m_rresp,
  output logic                            dma_m_rvalid,
  input  logic                            dma_m_rready,
  // DMA engine register AXI slave (32 bits)
  output logic [15:0]                     dma_s_awaddr,
  output logic                            dma_s_awvalid,
  input  logic                            dma_s_awready,
  output logic [31:0]                     dma_s_wdata,
  output logic [3:0]                      dma_s_wstrb,
  output logic                            dma_s_wvalid,
  input  logic                            dma_s_wready,
  input  logic [1:0]                      dma_s_bresp,
  input  logic                            dma_s_bvalid,
  output logic                            dma_s_bready,
  output logic [15:0]                     dma_s_araddr,
  output logic                            dma_s_arvalid,
  input  logic                            dma_s_arready,
  input  logic [31:0]                     dma_s_rdata,
  input  logic [1:0]                      dma_s_rresp,
  input  logic                            dma_s_rvalid,
  output logic                            dma_s_rready,
  // DDR3 controller AXI slave (full width)
  output logic [ADDR_W-1:0]               ddr_awaddr,
  output logic                            ddr_awvalid,
  input  logic                            ddr_awready,
  output logic [DATA_W-1:0]               ddr_wdata,
  output logic [STRB_W-1:0]               ddr_wstrb,
  output logic                            ddr_wvalid,
  input  logic                            ddr_wready,
  input  logic [1:0]                      ddr_bresp,
  input  logic                            ddr_bvalid,
  output logic                            ddr_bready,
  output logic [ADDR_W-1:0]               ddr_araddr,
  output logic                            ddr_arvalid,
  input  logic                            ddr_arready,
  input  logic [DATA_W-1:0]               ddr_rdata,
  input  logic [1:0]                      ddr_rresp,
  input  logic                            ddr_rvalid,
  output logic                            ddr_rready,
  // DMA engine packet streams
  input  logic [DW-1:0]                   dma_rx_tdata,   // host -> network
  input  logic [KW-1:0]                   dma_rx_tkeep,
  input  logic [UW-1:0]                   dma_rx_tuser,
  input  logic                            dma_rx_tlast,
  input  logic                            dma_rx_tvalid,
  output logic                            dma_rx_tready,
  output logic [DW-1:0]                   dma_tx_tdata,   // network -> host
  output logic [KW-1:0]                   dma_tx_tkeep,
  output logic [UW-1:0]                   dma_tx_tuser,
  output logic                            dma_tx_tlast,
  output logic                            dma_tx_tvalid,
  input  logic                            dma_tx_tready,
  // 10GbE MAC streams
  input  logic [NUM_PORTS-1:0][DW-1:0]    mac_rx_tdata,
  input  logic [NUM_PORTS-1:0][KW-1:0]    mac_rx_tkeep,
  input  logic [NUM_PORTS-1:0]            mac_rx_tlast,
  input  logic [NUM_PORTS-1:0]            mac_rx_tvalid,
  output logic [NUM_PORTS-1:0]            mac_rx_tready,
  output logic [NUM_PORTS-1:0][DW-1:0]    mac_tx_tdata,
  output logic [NUM_PORTS-1:0][KW-1:0]    mac_tx_tkeep,
  output logic [NUM_PORTS-1:0]            mac_tx_tlast,
  output logic [NUM_PORTS-1:0]            mac_tx_tvalid,
  input  logic [NUM_PORTS-1:0]            mac_tx_tready,
  // SD card SPI
  output logic                            spi_sclk,
  output logic                            spi_mosi,
  output logic                            spi_cs_n,
  input  logic                            spi_miso,
  // on-board I2C (open drain)
  output logic                            i2c_scl_oe,
  output logic                            i2c_sda_oe,
  input  logic                            i2c_sda_i
);

  localparam int NM = 2;
  localparam int NS = NUM_SLAVES;
  localparam int NP = NUM_PORTS + 1;   // stream ports incl. DMA

  // ---------------------------------------------------------------- masters
  logic [NM-1:0][ADDR_W-1:0] x_awaddr, x_araddr;
  logic [NM-1:0][DATA_W-1:0] x_wdata, x_rdata;
  logic [NM-1:0][STRB_W-1:0] x_wstrb;
  logic [NM-1:0][1:0]        x_bresp, x_rresp;
  logic [NM-1:0]             x_awvalid, x_awready, x_wvalid, x_wready, x_bvalid, x_bready,
                             x_arvalid, x_arready, x_rvalid, x_rready;

  assign x_awaddr[0]  = cpu_awaddr;
  assign x_awvalid[0] = cpu_awvalid;
  assign cpu_awready  = x_awready[0];
  assign x_wdata[0]   = cpu_wdata;
  assign x_wstrb[0]   = cpu_wstrb;
  assign x_wvalid[0]  = cpu_wvalid;
  assign cpu_wready   = x_wready[0];
  assign cpu_bresp    = x_bresp[0];
  assign cpu_bvalid   = x_bvalid[0];
  assign x_bready[0]  = cpu_bready;
  assign x_araddr[0]  = cpu_araddr;
  assign x_arvalid[0] = cpu_arvalid;
  assign cpu_arready  = x_arready[0];
  assign cpu_rdata    = x_rdata[0];
  assign cpu_rresp    = x_rresp[0];
  assign cpu_rvalid   = x_rvalid[0];
  assign x_rready[0]  = cpu_rready;

  axil_width_conv #(.ADDR_W(ADDR_W), .S_DATA_W(32), .M_DATA_W(DATA_W)) u_dma_up (
    .clk, .rst_n,
    .s_awaddr(dma_m_awaddr), .s_awvalid(dma_m_awvalid), .s_awready(dma_m_awready),
    .s_wdata(dma_m_wdata), .s_wstrb(dma_m_wstrb), .s_wvalid(dma_m_wvalid), .s_wready(dma_m_wready),
    .s_bresp(dma_m_bresp), .s_bvalid(dma_m_bvalid), .s_bready(dma_m_bready),
    .s_araddr(dma_m_araddr), .s_arvalid(dma_m_arvalid), .s_arready(dma_m_arready),
    .s_rdata(dma_m_rdata), .s_rresp(dma_m_rresp), .s_rvalid(dma_m_rvalid), .s_rready(dma_m_rready),
    .m_awaddr(x_awaddr[1]), .m_awvalid(x_awvalid[1]), .m_awready(x_awready[1]),
    .m_wdata(x_wdata[1]), .m_wstrb(x_wstrb[1]), .m_wvalid(x_wvalid[1]), .m_wready(x_wready[1]),
    .m_bresp(x_bresp[1]), .m_bvalid(x_bvalid[1]), .m_bready(x_bready[1]),
    .m_araddr(x_araddr[1]), .m_arvalid(x_arvalid[1]), .m_arready(x_arready[1]),
    .m_rdata(x_rdata[1]), .m_rresp(x_rresp[1]), .m_rvalid(x_rvalid[1]), .m_rready(x_rready[1])
  );

  // ---------------------------------------------------------------- slaves
  logic [NS-1:0][ADDR_W-1:0] y_awaddr, y_araddr;
  logic [NS-1:0][DATA_W-1:0] y_wdata, y_rdata;
  logic [NS-1:0][STRB_W-1:0] y_wstrb;
  logic [NS-1:0][1:0]        y_bresp, y_rresp;
  logic [NS-1:0]             y_awvalid, y_awready, y_wvalid, y_wready, y_bvalid, y_bready,
                             y_arvalid, y_arready, y_rvalid, y_rready;

  axil_interconnect #(.NUM_M(NM), .NUM_S(NS), .ADDR_W(ADDR_W), .DATA_W(DATA_W)) u_xbar (
    .clk, .rst_n,
    .s_awaddr(x_awaddr), .s_awvalid(x_awvalid), .s_awready(x_awready),
    .s_wdata(x_wdata), .s_wstrb(x_wstrb), .s_wvalid(x_wvalid), .s_wready(x_wready),
    .s_bresp(x_bresp), .s_bvalid(x_bvalid), .s_bready(x_bready),
    .s_araddr(x_araddr), .s_arvalid(x_arvalid), .s_arready(x_arready),
    .s_rdata(x_rdata), .s_rresp(x_rresp), .s_rvalid(x_rvalid), .s_rready(x_rready),
    .m_awaddr(y_awaddr), .m_awvalid(y_awvalid), .m_awready(y_awready),
    .m_wdata(y_wdata), .m_wstrb(y_wstrb), .m_wvalid(y_wvalid), .m_wready(y_wready),
    .m_bresp(y_bresp), .m_bvalid(y_bvalid), .m_bready(y_bready),
    .m_araddr(y_araddr), .m_arvalid(y_arvalid), .m_arready(y_arready),
    .m_rdata(y_rdata), .m_rresp(y_rresp), .m_rvalid(y_rvalid), .m_rready(y_rready)
  );

  // DDR3 controller: full width, straight out
  assign ddr_awaddr  = y_awaddr[SLV_DDR];
  assign ddr_awvalid = y_awvalid[SLV_DDR];
  assign ddr_wdata   = y_wdata[SLV_DDR];
  assign ddr_wstrb   = y_wstrb[SLV_DDR];
  assign ddr_wvalid  = y_wvalid[SLV_DDR];
  assign ddr_bready  = y_bready[SLV_DDR];
  assign ddr_araddr  = y_araddr[SLV_DDR];
  assign ddr_arvalid = y_arvalid[SLV_DDR];
  assign ddr_rready  = y_rready[SLV_DDR];
  assign y_awready[SLV_DDR] = ddr_awready;
  assign y_wready[SLV_DDR]  = ddr_wready;
  assign y_bresp[SLV_DDR]   = ddr_bresp;
  assign y_bvalid[SLV_DDR]  = ddr_bvalid;
  assign y_arready[SLV_DDR] = ddr_arready;
  assign y_rdata[SLV_DDR]   = ddr_rdata;
  assign y_rresp[SLV_DDR]   = ddr_rresp;
  assign y_rvalid[SLV_DDR]  = ddr_rvalid;

  // narrow peripherals: width adapters, then 16-bit local addresses
  logic [NS-1:0][ADDR_W-1:0] n_awaddr, n_araddr;
  logic [NS-1:0][63:0]       n_wdata, n_rdata;
  logic [NS-1:0][7:0]        n_wstrb;
  logic [NS-1:0][1:0]        n_bresp, n_rresp;
  logic [NS-1:0]             n_awvalid, n_awready, n_wvalid, n_wready, n_bvalid, n_bready,
                             n_arvalid, n_arready, n_rvalid, n_rready;

  for (genvar s = 1; s < NS; s++) begin : g_narrow
    localparam int W = (s == SLV_PAC) ? 64 : 32;
    axil_width_conv #(.ADDR_W(ADDR_W), .S_DATA_W(DATA_W), .M_DATA_W(W)) u_down (
      .clk, .rst_n,
      .s_awaddr(y_awaddr[s]), .s_awvalid(y_awvalid[s]), .s_awready(y_awready[s]),
      .s_wdata(y_wdata[s]), .s_wstrb(y_wstrb[s]), .s_wvalid(y_wvalid[s]), .s_wready(y_wready[s]),
      .s_bresp(y_bresp[s]), .s_bvalid(y_bvalid[s]), .s_bready(y_bready[s]),
      .s_araddr(y_araddr[s]), .s_arvalid(y_arvalid[s]), .s_arready(y_arready[s]),
      .s_rdata(y_rdata[s]), .s_rresp(y_rresp[s]), .s_rvalid(y_rvalid[s]), .s_rready(y_rready[s]),
      .m_awaddr(n_awaddr[s]), .m_awvalid(n_awvalid[s]), .m_awready(n_awready[s]),
      .m_wdata(n_wdata[s][W-1:0]), .m_wstrb(n_wstrb[s][W/8-1:0]), .m_wvalid(n_wvalid[s]),
      .m_wready(n_wready[s]),
      .m_bresp(n_bresp[s]), .m_bvalid(n_bvalid[s]), .m_bready(n_bready[s]),
      .m_araddr(n_araddr[s]), .m_arvalid(n_arvalid[s]), .m_arready(n_arready[s]),
      .m_rdata(n_rdata[s][W-1:0]), .m_rresp(n_rresp[s]), .m_rvalid(n_rvalid[s]),
      .m_rready(n_rready[s])
    );
    if (W < 64) begin : g_pad
      assign n_wdata[s][63:W]   = '0;
      assign n_wstrb[s][7:W/8]  = '0;
      assign n_rdata[s][63:W]   = '0;
    end
  end
  // slot 0 (DDR) of the narrow arrays is unused
  assign n_awaddr[0] = '0;  assign n_awvalid[0] = 1'b0; assign n_awready[0] = 1'b0;
  assign n_wdata[0]  = '0;  assign n_wstrb[0]   = '0;   assign n_wvalid[0]  = 1'b0;
  assign n_wready[0] = 1'b0; assign n_bresp[0]  = '0;   assign n_bvalid[0]  = 1'b0;
  assign n_bready[0] = 1'b0; assign n_araddr[0] = '0;   assign n_arvalid[0] = 1'b0;
  assign n_arready[0] = 1'b0; assign n_rdata[0] = '0;   assign n_rresp[0]   = '0;
  assign n_rvalid[0] = 1'b0; assign n_rready[0] = 1'b0;

  console_uart u_console (
    .clk, .rst_n,
    .s_axil_awaddr(n_awaddr[SLV_CONSOLE][15:0]), .s_axil_awvalid(n_awvalid[SLV_CONSOLE]),
    .s_axil_awready(n_awready[SLV_CONSOLE]),
    .s_axil_wdata(n_wdata[SLV_CONSOLE][31:0]), .s_axil_wstrb(n_wstrb[SLV_CONSOLE][3:0]),
    .s_axil_wvalid(n_wvalid[SLV_CONSOLE]), .s_axil_wready(n_wready[SLV_CONSOLE]),
    .s_axil_bresp(n_bresp[SLV_CONSOLE]), .s_axil_bvalid(n_bvalid[SLV_CONSOLE]),
    .s_axil_bready(n_bready[SLV_CONSOLE]),
    .s_axil_araddr(n_araddr[SLV_CONSOLE][15:0]), .s_axil_arvalid(n_arvalid[SLV_CONSOLE]),
    .s_axil_arready(n_arready[SLV_CONSOLE]),
    .s_axil_rdata(n_rdata[SLV_CONSOLE][31:0]), .s_axil_rresp(n_rresp[SLV_CONSOLE]),
    .s_axil_rvalid(n_rvalid[SLV_CONSOLE]), .s_axil_rready(n_rready[SLV_CONSOLE]),
    .irq(cpu_int0)
  );

  spi_ctrl u_spi (
    .clk, .rst_n,
    .s_axil_awaddr(n_awaddr[SLV_SPI][15:0]), .s_axil_awvalid(n_awvalid[SLV_SPI]),
    .s_axil_awready(n_awready[SLV_SPI]),
    .s_axil_wdata(n_wdata[SLV_SPI][31:0]), .s_axil_wstrb(n_wstrb[SLV_SPI][3:0]),
    .s_axil_wvalid(n_wvalid[SLV_SPI]), .s_axil_wready(n_wready[SLV_SPI]),
    .s_axil_bresp(n_bresp[SLV_SPI]), .s_axil_bvalid(n_bvalid[SLV_SPI]),
    .s_axil_bready(n_bready[SLV_SPI]),
    .s_axil_araddr(n_araddr[SLV_SPI][15:0]), .s_axil_arvalid(n_arvalid[SLV_SPI]),
    .s_axil_arready(n_arready[SLV_SPI]),
    .s_axil_rdata(n_rdata[SLV_SPI][31:0]), .s_axil_rresp(n_rresp[SLV_SPI]),
    .s_axil_rvalid(n_rvalid[SLV_SPI]), .s_axil_rready(n_rready[SLV_SPI]),
    .spi_sclk, .spi_mosi, .spi_cs_n, .spi_miso
  );

  i2c_ctrl u_i2c (
    .clk, .rst_n,
    .s_axil_awaddr(n_awaddr[SLV_I2C][15:0]), .s_axil_awvalid(n_awvalid[SLV_I2C]),
    .s_axil_awready(n_awready[SLV_I2C]),
    .s_axil_wdata(n_wdata[SLV_I2C][31:0]), .s_axil_wstrb(n_wstrb[SLV_I2C][3:0]),
    .s_axil_wvalid(n_wvalid[SLV_I2C]), .s_axil_wready(n_wready[SLV_I2C]),
    .s_axil_bresp(n_bresp[SLV_I2C]), .s_axil_bvalid(n_bvalid[SLV_I2C]),
    .s_axil_bready(n_bready[SLV_I2C]),
    .s_axil_araddr(n_araddr[SLV_I2C][15:0]), .s_axil_arvalid(n_arvalid[SLV_I2C]),
    .s_axil_arready(n_arready[SLV_I2C]),
    .s_axil_rdata(n_rdata[SLV_I2C][31:0]), .s_axil_rresp(n_rresp[SLV_I2C]),
    .s_axil_rvalid(n_rvalid[SLV_I2C]), .s_axil_rready(n_rready[SLV_I2C]),
    .scl_oe(i2c_scl_oe), .sda_oe(i2c_sda_oe), .sda_i(i2c_sda_i)
  );

  serial_debugger u_debug (
    .clk, .rst_n,
    .s_axil_awaddr(n_awaddr[SLV_DEBUG][15:0]), .s_axil_awvalid(n_awvalid[SLV_DEBUG]),
    .s_axil_awready(n_awready[SLV_DEBUG]),
    .s_axil_wdata(n_wdata[SLV_DEBUG][31:0]), .s_axil_wstrb(n_wstrb[SLV_DEBUG][3:0]),
    .s_axil_wvalid(n_wvalid[SLV_DEBUG]), .s_axil_wready(n_wready[SLV_DEBUG]),
    .s_axil_bresp(n_bresp[SLV_DEBUG]), .s_axil_bvalid(n_bvalid[SLV_DEBUG]),
    .s_axil_bready(n_bready[SLV_DEBUG]),
    .s_axil_araddr(n_araddr[SLV_DEBUG][15:0]), .s_axil_arvalid(n_arvalid[SLV_DEBUG]),
    .s_axil_arready(n_arready[SLV_DEBUG]),
    .s_axil_rdata(n_rdata[SLV_DEBUG][31:0]), .s_axil_rresp(n_rresp[SLV_DEBUG]),
    .s_axil_rvalid(n_rvalid[SLV_DEBUG]), .s_axil_rready(n_rready[SLV_DEBUG]),
    .dbg_to_cpu_data, .dbg_to_cpu_valid, .dbg_to_cpu_ready,
    .dbg_from_cpu_data, .dbg_from_cpu_valid, .dbg_from_cpu_ready
  );

  // DMA engine register slave: 32 bits, straight out
  assign dma_s_awaddr  = n_awaddr[SLV_DMA][15:0];
  assign dma_s_awvalid = n_awvalid[SLV_DMA];
  assign dma_s_wdata   = n_wdata[SLV_DMA][31:0];
  assign dma_s_wstrb   = n_wstrb[SLV_DMA][3:0];
  assign dma_s_wvalid  = n_wvalid[SLV_DMA];
  assign dma_s_bready  = n_bready[SLV_DMA];
  assign dma_s_araddr  = n_araddr[SLV_DMA][15:0];
  assign dma_s_arvalid = n_arvalid[SLV_DMA];
  assign dma_s_rready  = n_rready[SLV_DMA];
  assign n_awready[SLV_DMA]    = dma_s_awready;
  assign n_wready[SLV_DMA]     = dma_s_wready;
  assign n_bresp[SLV_DMA]      = dma_s_bresp;
  assign n_bvalid[SLV_DMA]     = dma_s_bvalid;
  assign n_arready[SLV_DMA]    = dma_s_arready;
  assign n_rdata[SLV_DMA][31:0] = dma_s_rdata;
  assign n_rresp[SLV_DMA]      = dma_s_rresp;
  assign n_rvalid[SLV_DMA]     = dma_s_rvalid;

  // ---------------------------------------------------------------- data plane
  logic [NP-1:0][DW-1:0] ia_tdata, oa_tdata;
  logic [NP-1:0][KW-1:0] ia_tkeep, oa_tkeep;
  logic [NP-1:0][UW-1:0] ia_tuser, oa_tuser;
  logic [NP-1:0]         ia_tlast, ia_tvalid, ia_tready, oa_tlast, oa_tvalid, oa_tready;

  logic [DW-1:0] rx_tdata, tx_tdata;
  logic [KW-1:0] rx_tkeep, tx_tkeep;
  logic [UW-1:0] rx_tuser, tx_tuser;
  logic          rx_tlast, rx_tvalid, rx_tready, tx_tlast, tx_tvalid, tx_tready;

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    eth10g_port #(.PORT_ID(p), .NUM_PORTS(NP), .FIFO_DEPTH(FIFO_DEPTH)) u_port (
      .clk, .rst_n,
      .mac_rx_tdata(mac_rx_tdata[p]), .mac_rx_tkeep(mac_rx_tkeep[p]),
      .mac_rx_tlast(mac_rx_tlast[p]), .mac_rx_tvalid(mac_rx_tvalid[p]),
      .mac_rx_tready(mac_rx_tready[p]),
      .m_tdata(ia_tdata[p]), .m_tkeep(ia_tkeep[p]), .m_tuser(ia_tuser[p]),
      .m_tlast(ia_tlast[p]), .m_tvalid(ia_tvalid[p]), .m_tready(ia_tready[p]),
      .s_tdata(oa_tdata[p]), .s_tkeep(oa_tkeep[p]), .s_tuser(oa_tuser[p]),
      .s_tlast(oa_tlast[p]), .s_tvalid(oa_tvalid[p]), .s_tready(oa_tready[p]),
      .mac_tx_tdata(mac_tx_tdata[p]), .mac_tx_tkeep(mac_tx_tkeep[p]),
      .mac_tx_tlast(mac_tx_tlast[p]), .mac_tx_tvalid(mac_tx_tvalid[p]),
      .mac_tx_tready(mac_tx_tready[p])
    );
  end

  // DMA stream is the last arbiter port
  assign ia_tdata[NP-1]  = dma_rx_tdata;
  assign ia_tkeep[NP-1]  = dma_rx_tkeep;
  assign ia_tuser[NP-1]  = dma_rx_tuser;
  assign ia_tlast[NP-1]  = dma_rx_tlast;
  assign ia_tvalid[NP-1] = dma_rx_tvalid;
  assign dma_rx_tready   = ia_tready[NP-1];
  assign dma_tx_tdata    = oa_tdata[NP-1];
  assign dma_tx_tkeep    = oa_tkeep[NP-1];
  assign dma_tx_tuser    = oa_tuser[NP-1];
  assign dma_tx_tlast    = oa_tlast[NP-1];
  assign dma_tx_tvalid   = oa_tvalid[NP-1];
  assign oa_tready[NP-1] = dma_tx_tready;

  input_arbiter #(.NUM_IN(NP)) u_iar (
    .clk, .rst_n,
    .s_tdata(ia_tdata), .s_tkeep(ia_tkeep), .s_tuser(ia_tuser), .s_tlast(ia_tlast),
    .s_tvalid(ia_tvalid), .s_tready(ia_tready),
    .m_tdata(rx_tdata), .m_tkeep(rx_tkeep), .m_tuser(rx_tuser), .m_tlast(rx_tlast),
    .m_tvalid(rx_tvalid), .m_tready(rx_tready)
  );

  packet_controller #(.AXI_DATA_W(64), .ADDR_W(16), .FIFO_DEPTH(FIFO_DEPTH)) u_pac (
    .clk, .rst_n,
    .s_axil_awaddr(n_awaddr[SLV_PAC][15:0]), .s_axil_awvalid(n_awvalid[SLV_PAC]),
    .s_axil_awready(n_awready[SLV_PAC]),
    .s_axil_wdata(n_wdata[SLV_PAC]), .s_axil_wstrb(n_wstrb[SLV_PAC]),
    .s_axil_wvalid(n_wvalid[SLV_PAC]), .s_axil_wready(n_wready[SLV_PAC]),
    .s_axil_bresp(n_bresp[SLV_PAC]), .s_axil_bvalid(n_bvalid[SLV_PAC]),
    .s_axil_bready(n_bready[SLV_PAC]),
    .s_axil_araddr(n_araddr[SLV_PAC][15:0]), .s_axil_arvalid(n_arvalid[SLV_PAC]),
    .s_axil_arready(n_arready[SLV_PAC]),
    .s_axil_rdata(n_rdata[SLV_PAC]), .s_axil_rresp(n_rresp[SLV_PAC]),
    .s_axil_rvalid(n_rvalid[SLV_PAC]), .s_axil_rready(n_rready[SLV_PAC]),
    .s_rx_tdata(rx_tdata), .s_rx_tkeep(rx_tkeep), .s_rx_tuser(rx_tuser), .s_rx_tlast(rx_tlast),
    .s_rx_tvalid(rx_tvalid), .s_rx_tready(rx_tready),
    .m_tx_tdata(tx_tdata), .m_tx_tkeep(tx_tkeep), .m_tx_tuser(tx_tuser), .m_tx_tlast(tx_tlast),
    .m_tx_tvalid(tx_tvalid), .m_tx_tready(tx_tready),
    .irq(cpu_int1)
  );

  output_arbiter #(.NUM_OUT(NP)) u_oar (
    .clk, .rst_n,
    .s_tdata(tx_tdata), .s_tkeep(tx_tkeep), .s_tuser(tx_tuser), .s_tlast(tx_tlast),
    .s_tvalid(tx_tvalid), .s_tready(tx_tready),
    .m_tdata(oa_tdata), .m_tkeep(oa_tkeep), .m_tuser(oa_tuser), .m_tlast(oa_tlast),
    .m_tvalid(oa_tvalid), .m_tready(oa_tready)
  );

endmodule
