// tb_packet_controller: the PAC driven as the CPU driver would drive it.
// Receive: packets enter the ST-S port; the test waits for the interrupt,
// reads RX_META (length, source), then RX_CTRL/RX_DATA per word, and
// compares with what was sent. Transmit: the test writes TX_META, TX_CTRL
// and TX_DATA words and checks that the packet leaves the ST-M port only
// after its last word was written, intact and with the written metadata.
// Also checks the interrupt enable and the status register.
module tb_packet_controller;
  import netsoc_pkg::*;
  localparam int DW = 64, KW = 8, UW = 128, NPKT = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_bfm #(.ADDR_W(16), .DATA_W(64)) bus (clk);
  logic [DW-1:0] s_rx_tdata, m_tx_tdata;
  logic [KW-1:0] s_rx_tkeep, m_tx_tkeep;
  logic [UW-1:0] s_rx_tuser, m_tx_tuser;
  logic s_rx_tlast, s_rx_tvalid, s_rx_tready, m_tx_tlast, m_tx_tvalid, m_tx_tready, irq;
  int checks = 0, failures = 0;

  packet_controller #(.FIFO_DEPTH(64), .FIFO_PKTS(8)) dut (
    .clk, .rst_n,
    .s_axil_awaddr(bus.awaddr), .s_axil_awvalid(bus.awvalid), .s_axil_awready(bus.awready),
    .s_axil_wdata(bus.wdata), .s_axil_wstrb(bus.wstrb), .s_axil_wvalid(bus.wvalid),
    .s_axil_wready(bus.wready), .s_axil_bresp(bus.bresp), .s_axil_bvalid(bus.bvalid),
    .s_axil_bready(bus.bready), .s_axil_araddr(bus.araddr), .s_axil_arvalid(bus.arvalid),
    .s_axil_arready(bus.arready), .s_axil_rdata(bus.rdata), .s_axil_rresp(bus.rresp),
    .s_axil_rvalid(bus.rvalid), .s_axil_rready(bus.rready),
    .s_rx_tdata, .s_rx_tkeep, .s_rx_tuser, .s_rx_tlast, .s_rx_tvalid, .s_rx_tready,
    .m_tx_tdata, .m_tx_tkeep, .m_tx_tuser, .m_tx_tlast, .m_tx_tvalid, .m_tx_tready, .irq
  );

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [63:0] rd;
  logic [1:0]  resp;

  // reference packets
  logic [DW-1:0] pdata[NPKT][$];
  logic [KW-1:0] lastkeep[NPKT];
  int            plen[NPKT];

  task automatic make_pkt(int p);
    int nb;
    nb = 1 + $urandom_range(0, 12);
    pdata[p].delete();
    for (int b = 0; b < nb; b++) pdata[p].push_back({$urandom, $urandom});
    lastkeep[p] = KW'((1 << $urandom_range(1, KW)) - 1);
    plen[p] = (nb - 1) * 8 + $countones(lastkeep[p]);
  endtask

  task automatic send_rx(int p, logic [7:0] src);
    for (int b = 0; b < pdata[p].size(); b++) begin
      @(negedge clk);
      s_rx_tvalid = 1; s_rx_tdata = pdata[p][b]; s_rx_tlast = (b == pdata[p].size() - 1);
      s_rx_tkeep = s_rx_tlast ? lastkeep[p] : '1;
      s_rx_tuser = '0; s_rx_tuser[23:16] = src; s_rx_tuser[15:0] = 16'hdead; // length is recounted
      #1;
      while (!s_rx_tready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 s_rx_tvalid = 0;
    end
  endtask

  // transmitted beats seen on ST-M
  logic [DW+KW:0] txseen[$];
  logic [UW-1:0]  txuser[$];
  initial begin
    m_tx_tready = 0;
    forever begin
      @(negedge clk);
      m_tx_tready = $urandom_range(0, 3) != 0;
      #1;
      if (m_tx_tvalid && m_tx_tready) begin
        txseen.push_back({m_tx_tlast, m_tx_tkeep, m_tx_tdata});
        txuser.push_back(m_tx_tuser);
      end
    end
  end

  initial begin
    bus.init();
    s_rx_tvalid = 0; s_rx_tdata = 0; s_rx_tkeep = 0; s_rx_tlast = 0; s_rx_tuser = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPKT; p++) make_pkt(p);

    // ---- receive
    send_rx(0, 8'h04);
    repeat (3) @(posedge clk);
    chk(!irq, "no interrupt while disabled");
    bus.write(16'h38, 64'h4, 8'hff, resp);
    chk(irq, "interrupt when a packet waits");
    for (int p = 1; p < 4; p++) send_rx(p, 8'(1 << (2 * p)));
    bus.read(16'h38, rd, resp);
    chk(rd[0] && rd[15:8] == 8'd4, $sformatf("status shows 4 packets (%h)", rd));
    for (int p = 0; p < 4; p++) begin
      chk(irq, "interrupt before read");
      bus.read(16'h20, rd, resp);
      chk(rd[15:0] == 16'(plen[p]), $sformatf("RX_META length %0d vs %0d", rd[15:0], plen[p]));
      chk(rd[23:16] == ((p == 0) ? 8'h04 : 8'(1 << (2 * p))), "RX_META source");
      for (int b = 0; b < pdata[p].size(); b++) begin
        bus.read(16'h28, rd, resp);
        chk(rd[9] && rd[8] == (b == pdata[p].size() - 1), "RX_CTRL valid/last");
        chk(rd[7:0] == ((b == pdata[p].size() - 1) ? lastkeep[p] : 8'hff), "RX_CTRL strobe");
        bus.read(16'h30, rd, resp);
        chk(rd == pdata[p][b] && resp == RESP_OKAY, "RX_DATA word");
      end
    end
    repeat (2) @(posedge clk);
    chk(!irq, "interrupt clears when the Rx-FIFO is empty");
    bus.read(16'h28, rd, resp);
    chk(rd[9] == 1'b0, "RX_CTRL not valid when empty");

    // ---- transmit
    for (int p = 4; p < NPKT; p++) begin
      logic [63:0] meta;
      meta = {32'd0, 8'(1 << (p % 4 * 2)), 8'h00, 16'(plen[p])};
      bus.write(16'h00, meta, 8'hff, resp);
      for (int b = 0; b < pdata[p].size(); b++) begin
        if (b == pdata[p].size() - 1) bus.write(16'h08, {55'd0, 1'b1, lastkeep[p]}, 8'hff, resp);
        if (b == pdata[p].size() - 1) chk(txseen.size() == 0, "nothing leaves before the last word");
        bus.write(16'h10, pdata[p][b], 8'hff, resp);
      end
      repeat (40) @(posedge clk);
      chk(txseen.size() == pdata[p].size(), $sformatf("packet %0d left whole", p));
      for (int b = 0; b < pdata[p].size(); b++) begin
        logic [DW+KW:0] e;
        e = {b == pdata[p].size() - 1, (b == pdata[p].size() - 1) ? lastkeep[p] : 8'hff, pdata[p][b]};
        if (txseen.size() > 0) begin
          chk(txseen.pop_front() == e, "tx beat");
          chk(txuser.pop_front() == UW'(meta), "tx metadata");
        end
      end
      bus.read(16'h08, rd, resp);
      chk(rd[8:0] == 9'h0ff, "TX_CTRL returns to full word, not last");
    end
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
