// tb_serial_debugger: the host sends command bytes that must reach the
// debug-unit stream in order (with random back-pressure from the CPU
// side), and the CPU side sends reply bytes that the host must read back
// in order with the valid flag; checks the status counts.
module tb_serial_debugger;
  localparam int N = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_bfm #(.ADDR_W(16), .DATA_W(32)) bus (clk);
  logic [7:0] dbg_to_cpu_data, dbg_from_cpu_data;
  logic dbg_to_cpu_valid, dbg_to_cpu_ready, dbg_from_cpu_valid, dbg_from_cpu_ready;
  int checks = 0, failures = 0;

  serial_debugger dut (
    .clk, .rst_n,
    .s_axil_awaddr(bus.awaddr), .s_axil_awvalid(bus.awvalid), .s_axil_awready(bus.awready),
    .s_axil_wdata(bus.wdata), .s_axil_wstrb(bus.wstrb), .s_axil_wvalid(bus.wvalid),
    .s_axil_wready(bus.wready), .s_axil_bresp(bus.bresp), .s_axil_bvalid(bus.bvalid),
    .s_axil_bready(bus.bready), .s_axil_araddr(bus.araddr), .s_axil_arvalid(bus.arvalid),
    .s_axil_arready(bus.arready), .s_axil_rdata(bus.rdata), .s_axil_rresp(bus.rresp),
    .s_axil_rvalid(bus.rvalid), .s_axil_rready(bus.rready),
    .dbg_to_cpu_data, .dbg_to_cpu_valid, .dbg_to_cpu_ready,
    .dbg_from_cpu_data, .dbg_from_cpu_valid, .dbg_from_cpu_ready
  );

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int got = 0;
  initial begin
    dbg_to_cpu_ready = 0;
    forever begin
      @(negedge clk);
      dbg_to_cpu_ready = $urandom_range(0, 2) == 0;
      #1;
      if (dbg_to_cpu_valid && dbg_to_cpu_ready) begin
        chk(dbg_to_cpu_data == 8'(8'h80 + got), "command byte order");
        got++;
      end
    end
  end

  logic [31:0] rd;
  logic [1:0] resp;
  initial begin
    bus.init();
    dbg_from_cpu_valid = 0; dbg_from_cpu_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) bus.write(16'h0, 32'h80 + 32'(i), 4'h1, resp);
    // CPU replies
    for (int i = 0; i < 10; i++) begin
      @(negedge clk);
      dbg_from_cpu_valid = 1; dbg_from_cpu_data = 8'(8'h20 + i);
      #1;
      while (!dbg_from_cpu_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 dbg_from_cpu_valid = 0;
    end
    bus.read(16'h8, rd, resp);
    chk(rd[31:16] == 16'd10, "status: bytes waiting for host");
    for (int i = 0; i < 10; i++) begin
      bus.read(16'h4, rd, resp);
      chk(rd[8] && rd[7:0] == 8'(8'h20 + i), "reply byte");
    end
    bus.read(16'h4, rd, resp);
    chk(!rd[8], "no byte left");
    repeat (300) @(posedge clk);
    chk(got == N, "all command bytes delivered");
    bus.read(16'h8, rd, resp);
    chk(rd == 32'd0, "status empty");
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
