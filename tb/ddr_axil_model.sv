// ddr_axil_model: behavioural stand-in for the DDR3 controller and memory
// module, for testbenches only. An AXI4-Lite slave of DATA_W bits over
// WORDS words (address bits above the word index are ignored), answering
// after a random delay of 0..MAX_LAT clocks. Not synthesizable.
module ddr_axil_model #(
  parameter int ADDR_W  = 40,
  parameter int DATA_W  = 256,
  parameter int WORDS   = 1024,
  parameter int MAX_LAT = 6
) (
  input  logic                clk,
  input  logic [ADDR_W-1:0]   awaddr,
  input  logic                awvalid,
  output logic                awready,
  input  logic [DATA_W-1:0]   wdata,
  input  logic [DATA_W/8-1:0] wstrb,
  input  logic                wvalid,
  output logic                wready,
  output logic [1:0]          bresp,
  output logic                bvalid,
  input  logic                bready,
  input  logic [ADDR_W-1:0]   araddr,
  input  logic                arvalid,
  output logic                arready,
  output logic [DATA_W-1:0]   rdata,
  output logic [1:0]          rresp,
  output logic                rvalid,
  input  logic                rready
);
  localparam int LB = $clog2(DATA_W / 8);
  logic [DATA_W-1:0] mem [WORDS];
  int accesses = 0;

  function automatic int idx(logic [ADDR_W-1:0] a);
    return int'((a >> LB) % WORDS);
  endfunction

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
    awready = 0; wready = 0; bvalid = 0; bresp = 0;
    arready = 0; rvalid = 0; rdata = 0; rresp = 0;
    forever begin
      @(negedge clk);
      #1;
      if (awvalid && wvalid) begin
        int i;
        i = idx(awaddr);
        repeat ($urandom_range(0, MAX_LAT)) @(negedge clk);
        awready = 1; wready = 1;
        for (int b = 0; b < DATA_W / 8; b++) if (wstrb[b]) mem[i][8*b +: 8] = wdata[8*b +: 8];
        @(negedge clk);
        awready = 0; wready = 0; bvalid = 1; bresp = 2'b00;
        accesses++;
        #1;
        while (!bready) begin @(negedge clk); #1; end
        @(negedge clk);
        bvalid = 0;
      end else if (arvalid) begin
        int i;
        i = idx(araddr);
        repeat ($urandom_range(0, MAX_LAT)) @(negedge clk);
        arready = 1;
        @(negedge clk);
        arready = 0; rvalid = 1; rdata = mem[i]; rresp = 2'b00;
        accesses++;
        #1;
        while (!rready) begin @(negedge clk); #1; end
        @(negedge clk);
        rvalid = 0;
      end
    end
  end
endmodule
