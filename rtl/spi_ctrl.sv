// spi_ctrl: SPI master for the SD card holding the boot loader and kernel.
//
// Byte transfers in SPI mode 0 (clock idles low, data sampled on the rising
// edge, changed on the falling edge), most significant bit first. Writing
// DATA starts a transfer: the byte is shifted out on MOSI while eight bits
// are shifted in from MISO; each clock half-period lasts DIV system clocks
// (DIV >= 1). Chip select is set by software, so multi-byte SD commands
// keep it low. 32-bit AXI4-Lite slave, byte offsets:
//   0x0 DATA   W: byte to send (the write waits while busy); R: last byte
//              received
//   0x4 STATUS R: [0] busy
//   0x8 CS     RW: [0] cs_n level (reset 1)
//   0xC DIV    RW: [15:0] half-period in clocks (reset DEFAULT_DIV)
// A transfer takes 16*DIV clocks. That an SPI controller reads the SD card
// follows the architecture; everything else here is this design's choice.
module spi_ctrl
  import netsoc_pkg::*;
#(
  parameter int ADDR_W      = 16,
  parameter int DEFAULT_DIV = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [ADDR_W-1:0] s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  output logic              spi_sclk,
  output logic              spi_mosi,
  output logic              spi_cs_n,
  input  logic              spi_miso
);

  logic        busy;
  logic [15:0] div, tick;
  logic [3:0]  edges;      // half-periods left in the transfer
  logic [7:0]  tx_sr, rx_sr, rx_byte;

  wire [1:0] waddr = s_axil_awaddr[3:2];
  wire [1:0] raddr = s_axil_araddr[3:2];
  wire wreq = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  wire wdo  = wreq && !(waddr == 2'd0 && busy);
  wire rdo  = s_axil_arvalid && !s_axil_rvalid;

  assign s_axil_awready = wdo;
  assign s_axil_wready  = wdo;
  assign s_axil_arready = rdo;
  assign s_axil_bresp   = RESP_OKAY;
  assign s_axil_rresp   = RESP_OKAY;
  assign spi_mosi       = tx_sr[7];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy          <= 1'b0;
      div           <= 16'(DEFAULT_DIV);
      tick          <= '0;
      edges         <= '0;
      tx_sr         <= '0;
      rx_sr         <= '0;
      rx_byte       <= '0;
      spi_sclk      <= 1'b0;
      spi_cs_n      <= 1'b1;
      s_axil_bvalid <= 1'b0;
    end else begin
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wdo) begin
        s_axil_bvalid <= 1'b1;
        unique case (waddr)
          2'd0: begin
            busy  <= 1'b1;
            tx_sr <= s_axil_wdata[7:0];
            edges <= 4'd15;
            tick  <= '0;
          end
          2'd2: spi_cs_n <= s_axil_wdata[0];
          2'd3: div <= (s_axil_wdata[15:0] == '0) ? 16'd1 : s_axil_wdata[15:0];
          default: ;
        endcase
      end
      if (busy) begin
        if (tick == div - 16'd1) begin
          tick <= '0;
          if (!spi_sclk) begin
            spi_sclk <= 1'b1;                    // rising edge: sample
            rx_sr    <= {rx_sr[6:0], spi_miso};
          end else begin
            spi_sclk <= 1'b0;                    // falling edge: shift
            tx_sr    <= {tx_sr[6:0], 1'b0};
          end
          if (edges == 4'd0) begin
            busy    <= 1'b0;
            rx_byte <= rx_sr;
          end else begin
            edges <= edges - 4'd1;
          end
        end else begin
          tick <= tick + 16'd1;
        end
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
        unique case (raddr)
          2'd0: s_axil_rdata <= {24'd0, rx_byte};
          2'd1: s_axil_rdata <= {31'd0, busy};
          2'd2: s_axil_rdata <= {31'd0, spi_cs_n};
          2'd3: s_axil_rdata <= {16'd0, div};
          default: s_axil_rdata <= '0;
        endcase
      end
    end
  end

endmodule
