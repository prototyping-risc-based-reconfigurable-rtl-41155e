// tb_eth10g_port: packets of random length enter the MAC receive side;
// each must leave towards the arbiter with tuser = {source code of the
// port, byte length} on every beat and data unchanged. Packets sent to the
// transmit side must reach the MAC unchanged. Port 2 of 4 (+DMA) is used.
module tb_eth10g_port;
  import netsoc_pkg::*;
  localparam int DW = 64, KW = 8, UW = 128, NPKT = 40, PID = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [DW-1:0] mac_rx_tdata, m_tdata, s_tdata, mac_tx_tdata;
  logic [KW-1:0] mac_rx_tkeep, m_tkeep, s_tkeep, mac_tx_tkeep;
  logic [UW-1:0] m_tuser, s_tuser;
  logic mac_rx_tlast, mac_rx_tvalid, mac_rx_tready, m_tlast, m_tvalid, m_tready;
  logic s_tlast, s_tvalid, s_tready, mac_tx_tlast, mac_tx_tvalid, mac_tx_tready;
  int checks = 0, failures = 0;
  bit rx_done = 0, tx_done = 0;

  eth10g_port #(.PORT_ID(PID), .NUM_PORTS(5), .FIFO_DEPTH(64)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [DW+KW:0] rxq[$], txq[$];
  int lens[$];

  initial begin
    mac_rx_tvalid = 0; mac_rx_tdata = 0; mac_rx_tkeep = 0; mac_rx_tlast = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPKT; p++) begin
      int nb, bytes;
      nb = 8 + $urandom_range(0, 40);      // 60..~390 bytes
      bytes = 0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        mac_rx_tvalid = 1; mac_rx_tdata = {$urandom, $urandom}; mac_rx_tlast = (b == nb - 1);
        mac_rx_tkeep = mac_rx_tlast ? KW'((1 << $urandom_range(1, KW)) - 1) : '1;
        for (int i = 0; i < KW; i++) bytes += mac_rx_tkeep[i];
        rxq.push_back({mac_rx_tlast, mac_rx_tkeep, mac_rx_tdata});
        if (mac_rx_tlast) lens.push_back(bytes);
        #1;
        while (!mac_rx_tready) begin @(negedge clk); #1; end
        @(posedge clk);
        #1 mac_rx_tvalid = 0;
      end
    end
    rx_done = 1;
  end

  initial begin
    m_tready = 0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      m_tready = $urandom_range(0, 3) != 0;
      #1;
      if (m_tvalid && m_tready) begin
        logic [DW+KW:0] e;
        pkt_meta_t meta;
        e = rxq.pop_front();
        meta = m_tuser;
        chk({m_tlast, m_tkeep, m_tdata} == e, "rx beat");
        chk(meta.src == 8'h10 && meta.dst == 8'h00 && meta.rsvd == '0, "source port code");
        chk(32'(meta.len) == lens[0], $sformatf("length %0d vs %0d", meta.len, lens[0]));
        if (m_tlast) void'(lens.pop_front());
      end
    end
  end

  // transmit path
  initial begin
    s_tvalid = 0; s_tdata = 0; s_tkeep = 0; s_tlast = 0; s_tuser = '1;
    wait (rst_n);
    for (int b = 0; b < 200; b++) begin
      @(negedge clk);
      s_tvalid = 1; s_tdata = {$urandom, $urandom}; s_tkeep = KW'($urandom); s_tlast = b % 7 == 6;
      txq.push_back({s_tlast, s_tkeep, s_tdata});
      #1;
      while (!s_tready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 s_tvalid = 0;
    end
    tx_done = 1;
  end
  initial begin
    mac_tx_tready = 0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      mac_tx_tready = $urandom_range(0, 1) != 0;
      #1;
      if (mac_tx_tvalid && mac_tx_tready)
        chk({mac_tx_tlast, mac_tx_tkeep, mac_tx_tdata} == txq.pop_front(), "tx beat");
    end
  end

  initial begin
    wait (rx_done && tx_done);
    repeat (200) @(posedge clk);
    chk(rxq.size() == 0 && txq.size() == 0, "all beats delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
