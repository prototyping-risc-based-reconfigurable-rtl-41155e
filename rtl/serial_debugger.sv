// serial_debugger: byte bridge between the host and the CPU's built-in
// debug unit.
//
// The host, through the AXI interconnect, writes command bytes that are
// queued and streamed to the debug unit, and reads back the bytes the
// debug unit sends (register dumps, instruction traces). This is how the
// processor is paused, resumed, inspected and told to boot once the kernel
// is in memory. Byte streams to and from the CPU use valid/ready.
// 32-bit AXI4-Lite slave, byte offsets:
//   0x0 TX     W: [7:0] byte to the CPU (dropped if the FIFO is full)
//   0x4 RX     R: [7:0] byte from the CPU, [8] valid (read pops)
//   0x8 STATUS R: [15:0] bytes queued to the CPU, [31:16] bytes waiting
//              for the host
// Writes complete the cycle AW and W are valid, reads answer one cycle
// after AR. The byte-serial link and its host access over PCIe follow the
// architecture; registers and FIFO depths are this design's choices.
module serial_debugger
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
  // to the CPU debug unit
  output logic [7:0]        dbg_to_cpu_data,
  output logic              dbg_to_cpu_valid,
  input  logic              dbg_to_cpu_ready,
  // from the CPU debug unit
  input  logic [7:0]        dbg_from_cpu_data,
  input  logic              dbg_from_cpu_valid,
  output logic              dbg_from_cpu_ready
);

  logic [7:0]    rx_rd;
  logic          tx_full, tx_empty, rx_full, rx_empty;
  logic [CW-1:0] tx_cnt, rx_cnt;

  wire [1:0] waddr = s_axil_awaddr[3:2];
  wire [1:0] raddr = s_axil_araddr[3:2];
  wire wdo = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  wire rdo = s_axil_arvalid && !s_axil_rvalid;

  assign s_axil_awready = wdo;
  assign s_axil_wready  = wdo;
  assign s_axil_arready = rdo;
  assign s_axil_bresp   = RESP_OKAY;
  assign s_axil_rresp   = RESP_OKAY;

  sync_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_to_cpu (
    .clk, .rst_n,
    .push(wdo && waddr == 2'd0 && s_axil_wstrb[0]), .wr_data(s_axil_wdata[7:0]),
    .pop(dbg_to_cpu_ready), .rd_data(dbg_to_cpu_data),
    .full(tx_full), .empty(tx_empty), .count(tx_cnt)
  );
  assign dbg_to_cpu_valid = !tx_empty;

  sync_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_from_cpu (
    .clk, .rst_n,
    .push(dbg_from_cpu_valid), .wr_data(dbg_from_cpu_data),
    .pop(rdo && raddr == 2'd1), .rd_data(rx_rd),
    .full(rx_full), .empty(rx_empty), .count(rx_cnt)
  );
  assign dbg_from_cpu_ready = !rx_full;

  always_ff @(posedge clk) begin
    if (!rst_n) s_axil_bvalid <= 1'b0;
    else if (wdo) s_axil_bvalid <= 1'b1;
    else if (s_axil_bready) s_axil_bvalid <= 1'b0;
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
          2'd1:    s_axil_rdata <= {23'd0, !rx_empty, rx_empty ? 8'd0 : rx_rd};
          2'd2:    s_axil_rdata <= {16'(rx_cnt), 16'(tx_cnt)};
          default: s_axil_rdata <= '0;
        endcase
      end
    end
  end

endmodule
