// tb_spi_ctrl: an SPI mode-0 slave model (shift register clocked by SCLK,
// driving MISO before each rising edge) exchanges random bytes with the
// controller. Checks the byte the slave received, the byte the controller
// received, chip select, the busy flag and the transfer time of 16*DIV
// clocks.
module tb_spi_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_bfm #(.ADDR_W(16), .DATA_W(32)) bus (clk);
  logic spi_sclk, spi_mosi, spi_cs_n, spi_miso;
  int checks = 0, failures = 0;

  spi_ctrl dut (
    .clk, .rst_n,
    .s_axil_awaddr(bus.awaddr), .s_axil_awvalid(bus.awvalid), .s_axil_awready(bus.awready),
    .s_axil_wdata(bus.wdata), .s_axil_wstrb(bus.wstrb), .s_axil_wvalid(bus.wvalid),
    .s_axil_wready(bus.wready), .s_axil_bresp(bus.bresp), .s_axil_bvalid(bus.bvalid),
    .s_axil_bready(bus.bready), .s_axil_araddr(bus.araddr), .s_axil_arvalid(bus.arvalid),
    .s_axil_arready(bus.arready), .s_axil_rdata(bus.rdata), .s_axil_rresp(bus.rresp),
    .s_axil_rvalid(bus.rvalid), .s_axil_rready(bus.rready),
    .spi_sclk, .spi_mosi, .spi_cs_n, .spi_miso
  );

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // slave model
  logic [7:0] s_out, s_in;
  int nbits = 0;
  assign spi_miso = s_out[7];
  always @(posedge spi_sclk) begin s_in <= {s_in[6:0], spi_mosi}; nbits++; end
  always @(negedge spi_sclk) s_out <= {s_out[6:0], 1'b0};

  logic [31:0] rd;
  logic [1:0] resp;
  int t0, t1, busy_cycles;
  initial begin
    bus.init();
    s_out = 0; s_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    chk(spi_cs_n && !spi_sclk, "idle levels");
    bus.write(16'h8, 32'h0, 4'hf, resp);
    chk(!spi_cs_n, "chip select asserted");
    for (int div = 1; div <= 5; div += 2) begin
      bus.write(16'hC, 32'(div), 4'hf, resp);
      for (int i = 0; i < 6; i++) begin
        logic [7:0] m, s;
        m = 8'($urandom); s = 8'($urandom);
        s_out = s;
        nbits = 0;
        bus.write(16'h0, {24'd0, m}, 4'hf, resp);
        busy_cycles = 0;
        // poll STATUS; each read takes a few clocks, so the bound is loose above
        t0 = $time;
        do bus.read(16'h4, rd, resp); while (rd[0]);
        busy_cycles = (int'($time) - t0) / 10;
        chk(busy_cycles >= 16 * div - 2 && busy_cycles <= 16 * div + 8,
            $sformatf("transfer time %0d for DIV %0d", busy_cycles, div));
        bus.read(16'h4, rd, resp);
        chk(rd[0] == 0, "not busy after transfer");
        chk(nbits == 8 && s_in == m, $sformatf("slave got %h want %h", s_in, m));
        bus.read(16'h0, rd, resp);
        chk(rd[7:0] == s, $sformatf("master got %h want %h", rd[7:0], s));
      end
    end
    bus.write(16'h8, 32'h1, 4'hf, resp);
    chk(spi_cs_n, "chip select released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
