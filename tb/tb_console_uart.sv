// tb_console_uart: the CPU prints a string through DATA, the host reads it
// back through HDATA; the host types characters through HDATA, the CPU
// reads them through DATA with the valid flag and remaining count. Checks
// the interrupt rules (RI with RE, WI with WE), the space counts and that
// a full FIFO drops further characters.
module tb_console_uart;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_bfm #(.ADDR_W(16), .DATA_W(32)) bus (clk);
  logic irq;
  int checks = 0, failures = 0;

  console_uart #(.FIFO_DEPTH(DEPTH)) dut (
    .clk, .rst_n,
    .s_axil_awaddr(bus.awaddr), .s_axil_awvalid(bus.awvalid), .s_axil_awready(bus.awready),
    .s_axil_wdata(bus.wdata), .s_axil_wstrb(bus.wstrb), .s_axil_wvalid(bus.wvalid),
    .s_axil_wready(bus.wready), .s_axil_bresp(bus.bresp), .s_axil_bvalid(bus.bvalid),
    .s_axil_bready(bus.bready), .s_axil_araddr(bus.araddr), .s_axil_arvalid(bus.arvalid),
    .s_axil_arready(bus.arready), .s_axil_rdata(bus.rdata), .s_axil_rresp(bus.rresp),
    .s_axil_rvalid(bus.rvalid), .s_axil_rready(bus.rready), .irq
  );

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] rd;
  logic [1:0] resp;
  string msg = "FreeBSD/mips";

  initial begin
    bus.init();
    repeat (3) @(posedge clk);
    rst_n = 1;
    chk(!irq, "no interrupt after reset");
    bus.write(16'h4, 32'h2, 4'hf, resp);          // WE
    chk(irq, "WI with empty output FIFO");
    for (int i = 0; i < msg.len(); i++) bus.write(16'h0, 32'(msg[i]), 4'h1, resp);
    bus.read(16'h4, rd, resp);
    chk(rd[31:16] == 16'(DEPTH - msg.len()), "WSPACE");
    chk(rd[9] == 1'b0 && !irq, "WI clears above half full");
    bus.read(16'hC, rd, resp);
    chk(rd[15:0] == 16'(msg.len()), "host sees count");
    for (int i = 0; i < msg.len(); i++) begin
      bus.read(16'h8, rd, resp);
      chk(rd[15] && rd[7:0] == msg[i] && rd[31:16] == 16'(msg.len() - 1 - i), "host reads char");
    end
    bus.read(16'h8, rd, resp);
    chk(rd[15] == 1'b0, "host read when empty has no valid");
    bus.write(16'h4, 32'h1, 4'hf, resp);          // RE only
    chk(!irq, "no interrupt without input");
    for (int i = 0; i < DEPTH + 3; i++) bus.write(16'h8, 32'h40 + 32'(i), 4'h1, resp);
    chk(irq, "RI when input waits");
    bus.read(16'hC, rd, resp);
    chk(rd[31:16] == 16'd0, "input FIFO full");
    bus.write(16'h4, 32'h0, 4'hf, resp);          // RE off
    chk(!irq, "no RI while RE is off");
    bus.write(16'h4, 32'h1, 4'hf, resp);
    chk(irq, "RI again with RE on");
    for (int i = 0; i < DEPTH; i++) begin
      bus.read(16'h0, rd, resp);
      chk(rd[15] && rd[7:0] == 8'(8'h40 + i) && rd[31:16] == 16'(DEPTH - 1 - i), "CPU reads char");
    end
    bus.read(16'h0, rd, resp);
    chk(rd[15] == 1'b0, "extra characters were dropped");
    chk(!irq, "RI clears");
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
