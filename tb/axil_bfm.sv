// axil_bfm: AXI4-Lite master bus-functional model for testbenches.
// Holds the signals of one AXI4-Lite port and offers blocking write/read
// tasks. Signals change on the falling clock edge and handshakes are
// judged just before the rising edge, so there are no races with the
// device. A write presents AW and W together and waits for B; a read
// presents AR and waits for R. Call init() before the first access.
interface axil_bfm #(
  parameter int ADDR_W = 16,
  parameter int DATA_W = 32
) (
  input logic clk
);
  logic [ADDR_W-1:0]   awaddr, araddr;
  logic                awvalid, awready, wvalid, wready, bvalid, bready;
  logic                arvalid, arready, rvalid, rready;
  logic [DATA_W-1:0]   wdata, rdata;
  logic [DATA_W/8-1:0] wstrb;
  logic [1:0]          bresp, rresp;

  task automatic init();
    awaddr = '0; awvalid = 1'b0; wdata = '0; wstrb = '0; wvalid = 1'b0; bready = 1'b0;
    araddr = '0; arvalid = 1'b0; rready = 1'b0;
  endtask

  task automatic write(input logic [ADDR_W-1:0] a, input logic [DATA_W-1:0] d,
                       input logic [DATA_W/8-1:0] s, output logic [1:0] resp);
    bit aw_hs, w_hs;
    @(negedge clk);
    awaddr = a; awvalid = 1'b1; wdata = d; wstrb = s; wvalid = 1'b1; bready = 1'b1;
    #1;
    while (awvalid || wvalid) begin
      aw_hs = awvalid && awready;
      w_hs  = wvalid && wready;
      @(negedge clk);
      if (aw_hs) awvalid = 1'b0;
      if (w_hs)  wvalid  = 1'b0;
      #1;
    end
    while (!bvalid) begin @(negedge clk); #1; end
    resp = bresp;
    @(negedge clk);
    bready = 1'b0;
  endtask

  task automatic read(input logic [ADDR_W-1:0] a, output logic [DATA_W-1:0] d,
                      output logic [1:0] resp);
    @(negedge clk);
    araddr = a; arvalid = 1'b1; rready = 1'b1;
    #1;
    while (!arready) begin @(negedge clk); #1; end
    @(negedge clk);
    arvalid = 1'b0;
    #1;
    while (!rvalid) begin @(negedge clk); #1; end
    d = rdata;
    resp = rresp;
    @(negedge clk);
    rready = 1'b0;
  endtask
endinterface
