// console_uart: emulated serial console shared by the CPU and the host.
//
// Two character FIFOs: CPU-to-host (what the operating system prints) and
// host-to-CPU (what the user types). The CPU sees a JTAG-UART style pair
// of registers; the host reaches the other ends of the FIFOs through the
// same AXI slave (over PCIe and the DMA engine's master), so no physical
// UART pins exist. 32-bit AXI4-Lite slave, byte offsets:
//   0x0 DATA    CPU  R: [7:0] char, [15] valid, [31:16] chars left (pops)
//                    W: [7:0] char to host (dropped if the FIFO is full)
//   0x4 CONTROL CPU  RW: [0] RE, [1] WE;  R: [8] RI, [9] WI,
//                    [31:16] free space towards the host
//   0x8 HDATA   host R: [7:0] char, [15] valid, [31:16] chars left (pops)
//                    W: [7:0] char to CPU (dropped if the FIFO is full)
//   0xC HSTATUS host R: [15:0] chars waiting for host, [31:16] free space
//                    towards the CPU
// irq (Int0 of the CPU) = RI | WI, with RI = RE and a character waiting for
// the CPU, WI = WE and the FIFO towards the host at most half full.
// A write completes the cycle AW and W are both valid, a read answers one
// cycle after AR. The CPU-side layout follows the JTAG UART the BERI
// FreeBSD port already drives (so the kernel finds it at its usual
// registers); the host side, the sizes and the interrupt rule are this
// design's choices.
module console_uart
  import netsoc_pkg::*;
#(
  parameter int ADDR_W     = 16,
  parameter int FIFO_DEPTH = 64,
  localparam int CW = $clog2(FIFO_DEPTH) + 1
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
  output logic              irq
);

  logic [7:0]    c2h_rd, h2c_rd;
  logic          c2h_full, c2h_empty, h2c_full, h2c_empty;
  logic [CW-1:0] c2h_cnt, h2c_cnt;
  logic          re, we;

  wire [1:0] waddr = s_axil_awaddr[3:2];
  wire [1:0] raddr = s_axil_araddr[3:2];
  wire wdo = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  wire rdo = s_axil_arvalid && !s_axil_rvalid;

  assign s_axil_awready = wdo;
  assign s_axil_wready  = wdo;
  assign s_axil_arready = rdo;
  assign s_axil_bresp   = RESP_OKAY;
  assign s_axil_rresp   = RESP_OKAY;

  wire wr_byte0 = s_axil_wstrb[0];

  sync_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_c2h (
    .clk, .rst_n,
    .push(wdo && waddr == 2'd0 && wr_byte0), .wr_data(s_axil_wdata[7:0]),
    .pop(rdo && raddr == 2'd2), .rd_data(c2h_rd),
    .full(c2h_full), .empty(c2h_empty), .count(c2h_cnt)
  );

  sync_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_h2c (
    .clk, .rst_n,
    .push(wdo && waddr == 2'd2 && wr_byte0), .wr_data(s_axil_wdata[7:0]),
    .pop(rdo && raddr == 2'd0), .rd_data(h2c_rd),
    .full(h2c_full), .empty(h2c_empty), .count(h2c_cnt)
  );

  wire [15:0] c2h_space = 16'(FIFO_DEPTH) - 16'(c2h_cnt);
  wire [15:0] h2c_space = 16'(FIFO_DEPTH) - 16'(h2c_cnt);
  wire ri = re && !h2c_empty;
  wire wi = we && (32'(c2h_cnt) <= FIFO_DEPTH / 2);
  assign irq = ri || wi;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      re <= 1'b0;
      we <= 1'b0;
      s_axil_bvalid <= 1'b0;
    end else begin
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wdo) begin
        s_axil_bvalid <= 1'b1;
        if (waddr == 2'd1 && wr_byte0) begin
          re <= s_axil_wdata[0];
          we <= s_axil_wdata[1];
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
          2'd0: s_axil_rdata <= h2c_empty ? 32'd0
                               : {16'(h2c_cnt) - 16'd1, 1'b1, 7'd0, h2c_rd};
          2'd1: s_axil_rdata <= {c2h_space, 6'd0, wi, ri, 6'd0, we, re};
          2'd2: s_axil_rdata <= c2h_empty ? 32'd0
                               : {16'(c2h_cnt) - 16'd1, 1'b1, 7'd0, c2h_rd};
          2'd3: s_axil_rdata <= {h2c_space, 16'(c2h_cnt)};
          default: s_axil_rdata <= '0;
        endcase
      end
    end
  end

endmodule
