// tb_i2c_ctrl: an I2C slave model on an open-drain bus. The test writes a
// device address byte with START, a register byte, then a repeated START,
// reads one byte with NACK and ends with STOP. The model decodes START and
// STOP conditions and the bits on rising SCL edges, acknowledges written
// bytes (except the address 0x7E, which it refuses), and drives the read
// byte. Checks bytes, ACK/NACK status and bus conditions.
module tb_i2c_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_bfm #(.ADDR_W(16), .DATA_W(32)) bus (clk);
  logic scl_oe, sda_oe;
  logic slave_sda_low;
  wire  scl = !scl_oe;
  wire  sda = !(sda_oe || slave_sda_low);
  int checks = 0, failures = 0;

  i2c_ctrl #(.DEFAULT_DIV(3)) dut (
    .clk, .rst_n,
    .s_axil_awaddr(bus.awaddr), .s_axil_awvalid(bus.awvalid), .s_axil_awready(bus.awready),
    .s_axil_wdata(bus.wdata), .s_axil_wstrb(bus.wstrb), .s_axil_wvalid(bus.wvalid),
    .s_axil_wready(bus.wready), .s_axil_bresp(bus.bresp), .s_axil_bvalid(bus.bvalid),
    .s_axil_bready(bus.bready), .s_axil_araddr(bus.araddr), .s_axil_arvalid(bus.arvalid),
    .s_axil_arready(bus.arready), .s_axil_rdata(bus.rdata), .s_axil_rresp(bus.rresp),
    .s_axil_rvalid(bus.rvalid), .s_axil_rready(bus.rready),
    .scl_oe, .sda_oe, .sda_i(sda)
  );

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // slave model, sampled on the system clock
  int starts = 0, stops = 0, nbit = 0;
  logic [7:0] sh, bytes_rx[$];
  logic reading = 0, refuse = 0, rd_active = 0;
  logic [7:0] rd_byte = 8'hA5;
  logic scl_q = 1, sda_q = 1;
  always @(posedge clk) begin
    scl_q <= scl; sda_q <= sda;
    if (scl && scl_q && sda_q && !sda) begin starts++; nbit = 0; slave_sda_low <= 0; end
    if (scl && scl_q && !sda_q && sda) begin stops++; nbit = 0; slave_sda_low <= 0; end
    if (scl && !scl_q) begin                      // rising SCL: sample
      if (nbit < 8) sh = {sh[6:0], sda};
      else if (rd_active) chk(sda == 1'b1, "master NACKs the read byte");
      nbit++;
    end
    if (!scl && scl_q) begin                      // falling SCL: drive
      if (nbit == 8 && !rd_active) begin
        bytes_rx.push_back(sh);
        refuse = (sh == 8'h7E);
        slave_sda_low <= !refuse;                 // ACK
        if (bytes_rx.size() == 3) reading = sh[0];
      end else if (nbit == 9) begin
        nbit = 0;
        rd_active = reading;
        slave_sda_low <= reading ? !rd_byte[7] : 1'b0;
      end else if (rd_active && nbit < 8) begin
        slave_sda_low <= !rd_byte[7 - nbit];
      end else begin
        slave_sda_low <= 0;
      end
    end
  end

  logic [31:0] rd;
  logic [1:0] resp;
  task automatic cmd(logic [31:0] c);
    bus.write(16'h0, c, 4'hf, resp);
    do bus.read(16'h4, rd, resp); while (rd[0]);
  endtask

  initial begin
    bus.init();
    slave_sda_low = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cmd(32'h0000_0500 | 32'h90);        // START + WRITE 0x90
    chk(!rd[1], "address ACKed");
    cmd(32'h0000_0400 | 32'h1C);        // WRITE 0x1C
    chk(!rd[1], "register byte ACKed");
    cmd(32'h0000_0500 | 32'h91);        // repeated START + WRITE 0x91 (read)
    chk(!rd[1], "read address ACKed");
    cmd(32'h0000_1A00);                 // READ + NACK + STOP
    chk(rd[15:8] == 8'hA5, $sformatf("read byte %h", rd[15:8]));
    chk(starts == 2 && stops == 1, $sformatf("conditions: %0d starts %0d stops", starts, stops));
    chk(bytes_rx.size() == 3 && bytes_rx[0] == 8'h90 && bytes_rx[1] == 8'h1C && bytes_rx[2] == 8'h91,
        "slave received the written bytes");
    reading = 0;
    rd_active = 0;
    cmd(32'h0000_0700 | 32'h7E);        // START + WRITE 0x7E + STOP, refused
    chk(rd[1], "NACK reported");
    chk(starts == 3 && stops == 2 && scl && sda, "bus released after STOP");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
