// tb_netsoc_top: end-to-end run of the whole system at its default sizes.
//
// The testbench plays the parts that are not in the RTL, as in a system
// simulation: a host emulator on the DMA engine's 32-bit AXI master and
// packet stream, a CPU emulator on the 256-bit CPU master and the two
// interrupts, a DDR3 memory model, packet generators and loggers on the
// four 10GbE MAC streams, an SPI loopback and a pulled-up I2C bus.
// Sequence: the host loads an "image" into DDR3 and the CPU reads it back;
// the host sends debug-unit bytes; the CPU prints on the console and the
// host reads it while the CPU works; packets arrive on all four ports and
// from the host at once, the CPU takes each one after the packet interrupt
// and echoes it back to the port it came from (the host packet goes to
// port 0 and to the host stream at once); SPI and I2C transfers; an
// unmapped access. Each mechanism is counted and must occur at least once:
// input-arbiter contention, MAC receive back-pressure, output back-pressure,
// packet interrupt, console interrupt, concurrent masters, DECERR,
// multicast, width adaptation in both directions.
module tb_netsoc_top;
  import netsoc_pkg::*;
  localparam int NP = 4, DW = 64, KW = 8, UW = 128, AW = 40, BW = 256;
  localparam int PKTS_PER_PORT = 3;
  localparam int PKTS_PORT0    = 80;
  localparam logic [39:0] P_CON = PERIPH_BASE + 40'h1_0000 * SLV_CONSOLE;
  localparam logic [39:0] P_SPI = PERIPH_BASE + 40'h1_0000 * SLV_SPI;
  localparam logic [39:0] P_I2C = PERIPH_BASE + 40'h1_0000 * SLV_I2C;
  localparam logic [39:0] P_DBG = PERIPH_BASE + 40'h1_0000 * SLV_DEBUG;
  localparam logic [39:0] P_PAC = PERIPH_BASE + 40'h1_0000 * SLV_PAC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_bfm #(.ADDR_W(AW), .DATA_W(BW)) cpu (clk);
  axil_bfm #(.ADDR_W(AW), .DATA_W(32)) host (clk);

  logic cpu_int0, cpu_int1;
  logic [7:0] dbg_to_cpu_data, dbg_from_cpu_data;
  logic dbg_to_cpu_valid, dbg_to_cpu_ready, dbg_from_cpu_valid, dbg_from_cpu_ready;
  logic [15:0] dma_s_awaddr, dma_s_araddr;
  logic dma_s_awvalid, dma_s_wvalid, dma_s_bready, dma_s_arvalid, dma_s_rready;
  logic [31:0] dma_s_wdata;
  logic [3:0] dma_s_wstrb;
  logic [AW-1:0] ddr_awaddr, ddr_araddr;
  logic [BW-1:0] ddr_wdata, ddr_rdata;
  logic [BW/8-1:0] ddr_wstrb;
  logic [1:0] ddr_bresp, ddr_rresp;
  logic ddr_awvalid, ddr_awready, ddr_wvalid, ddr_wready, ddr_bvalid, ddr_bready,
        ddr_arvalid, ddr_arready, ddr_rvalid, ddr_rready;
  logic [DW-1:0] dma_rx_tdata, dma_tx_tdata;
  logic [KW-1:0] dma_rx_tkeep, dma_tx_tkeep;
  logic [UW-1:0] dma_rx_tuser, dma_tx_tuser;
  logic dma_rx_tlast, dma_rx_tvalid, dma_rx_tready, dma_tx_tlast, dma_tx_tvalid, dma_tx_tready;
  logic [NP-1:0][DW-1:0] mac_rx_tdata, mac_tx_tdata;
  logic [NP-1:0][KW-1:0] mac_rx_tkeep, mac_tx_tkeep;
  logic [NP-1:0] mac_rx_tlast, mac_rx_tvalid, mac_rx_tready, mac_tx_tlast, mac_tx_tvalid, mac_tx_tready;
  logic spi_sclk, spi_mosi, spi_cs_n, spi_miso;
  logic i2c_scl_oe, i2c_sda_oe;

  netsoc_top dut (
    .clk, .rst_n,
    .cpu_awaddr(cpu.awaddr), .cpu_awvalid(cpu.awvalid), .cpu_awready(cpu.awready),
    .cpu_wdata(cpu.wdata), .cpu_wstrb(cpu.wstrb), .cpu_wvalid(cpu.wvalid), .cpu_wready(cpu.wready),
    .cpu_bresp(cpu.bresp), .cpu_bvalid(cpu.bvalid), .cpu_bready(cpu.bready),
    .cpu_araddr(cpu.araddr), .cpu_arvalid(cpu.arvalid), .cpu_arready(cpu.arready),
    .cpu_rdata(cpu.rdata), .cpu_rresp(cpu.rresp), .cpu_rvalid(cpu.rvalid), .cpu_rready(cpu.rready),
    .cpu_int0, .cpu_int1,
    .dbg_to_cpu_data, .dbg_to_cpu_valid, .dbg_to_cpu_ready,
    .dbg_from_cpu_data, .dbg_from_cpu_valid, .dbg_from_cpu_ready,
    .dma_m_awaddr(host.awaddr), .dma_m_awvalid(host.awvalid), .dma_m_awready(host.awready),
    .dma_m_wdata(host.wdata), .dma_m_wstrb(host.wstrb), .dma_m_wvalid(host.wvalid),
    .dma_m_wready(host.wready), .dma_m_bresp(host.bresp), .dma_m_bvalid(host.bvalid),
    .dma_m_bready(host.bready), .dma_m_araddr(host.araddr), .dma_m_arvalid(host.arvalid),
    .dma_m_arready(host.arready), .dma_m_rdata(host.rdata), .dma_m_rresp(host.rresp),
    .dma_m_rvalid(host.rvalid), .dma_m_rready(host.rready),
    .dma_s_awaddr, .dma_s_awvalid, .dma_s_awready(1'b1), .dma_s_wdata, .dma_s_wstrb,
    .dma_s_wvalid, .dma_s_wready(1'b1), .dma_s_bresp(2'b00), .dma_s_bvalid(1'b0), .dma_s_bready,
    .dma_s_araddr, .dma_s_arvalid, .dma_s_arready(1'b1), .dma_s_rdata(32'd0), .dma_s_rresp(2'b00),
    .dma_s_rvalid(1'b0), .dma_s_rready,
    .ddr_awaddr, .ddr_awvalid, .ddr_awready, .ddr_wdata, .ddr_wstrb, .ddr_wvalid, .ddr_wready,
    .ddr_bresp, .ddr_bvalid, .ddr_bready, .ddr_araddr, .ddr_arvalid, .ddr_arready,
    .ddr_rdata, .ddr_rresp, .ddr_rvalid, .ddr_rready,
    .dma_rx_tdata, .dma_rx_tkeep, .dma_rx_tuser, .dma_rx_tlast, .dma_rx_tvalid, .dma_rx_tready,
    .dma_tx_tdata, .dma_tx_tkeep, .dma_tx_tuser, .dma_tx_tlast, .dma_tx_tvalid, .dma_tx_tready,
    .mac_rx_tdata, .mac_rx_tkeep, .mac_rx_tlast, .mac_rx_tvalid, .mac_rx_tready,
    .mac_tx_tdata, .mac_tx_tkeep, .mac_tx_tlast, .mac_tx_tvalid, .mac_tx_tready,
    .spi_sclk, .spi_mosi, .spi_cs_n, .spi_miso,
    .i2c_scl_oe, .i2c_sda_oe, .i2c_sda_i(!i2c_sda_oe)
  );

  ddr_axil_model #(.ADDR_W(AW), .DATA_W(BW)) u_ddr (
    .clk, .awaddr(ddr_awaddr), .awvalid(ddr_awvalid), .awready(ddr_awready),
    .wdata(ddr_wdata), .wstrb(ddr_wstrb), .wvalid(ddr_wvalid), .wready(ddr_wready),
    .bresp(ddr_bresp), .bvalid(ddr_bvalid), .bready(ddr_bready),
    .araddr(ddr_araddr), .arvalid(ddr_arvalid), .arready(ddr_arready),
    .rdata(ddr_rdata), .rresp(ddr_rresp), .rvalid(ddr_rvalid), .rready(ddr_rready)
  );

  assign spi_miso = spi_mosi;   // loopback

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ mechanism counters
  int n_iar_contend = 0, n_rx_backpressure = 0, n_tx_backpressure = 0, n_int1 = 0, n_int0 = 0;
  int n_both_masters = 0, n_decerr = 0, n_multicast = 0, n_up = 0, n_down = 0;
  logic int1_q = 0, int0_q = 0, cpu_busy = 0, host_busy = 0;
  always @(posedge clk) if (rst_n) begin
    if ($countones(dut.ia_tvalid) > 1 && !dut.u_iar.locked && dut.rx_tready) n_iar_contend++;
    if (|(mac_rx_tvalid & ~mac_rx_tready)) n_rx_backpressure++;
    if (dut.tx_tvalid && !dut.tx_tready) n_tx_backpressure++;
    if (cpu_int1 && !int1_q) n_int1++;
    if (cpu_int0 && !int0_q) n_int0++;
    int1_q <= cpu_int1; int0_q <= cpu_int0;
    if (cpu.awvalid || cpu.arvalid) cpu_busy <= 1;
    else if ((cpu.bvalid && cpu.bready) || (cpu.rvalid && cpu.rready)) cpu_busy <= 0;
    if (host.awvalid || host.arvalid) host_busy <= 1;
    else if ((host.bvalid && host.bready) || (host.rvalid && host.rready)) host_busy <= 0;
    if (cpu_busy && host_busy) n_both_masters++;
    if (dut.u_xbar.state == 3'd1 && !dut.u_xbar.dec_hit) n_decerr++;
    if (host.awvalid && host.awready) n_up++;
    if (dut.n_wvalid[SLV_PAC] && dut.n_wready[SLV_PAC]) n_down++;
  end

  // ------------------------------------------------------------ CPU access helpers
  function automatic logic [BW-1:0] lane_data(logic [39:0] a, logic [63:0] d);
    return BW'(d) << (64 * a[4:3]);
  endfunction
  task automatic cpu_wr64(logic [39:0] a, logic [63:0] d, output logic [1:0] r);
    cpu.write(a, lane_data(a, d), 32'hFF << (8 * {a[4:3], 3'b000}), r);
  endtask
  task automatic cpu_wr32(logic [39:0] a, logic [31:0] d, output logic [1:0] r);
    cpu.write(a, BW'(d) << (32 * a[4:2]), 32'hF << (4 * a[4:2]), r);
  endtask
  task automatic cpu_rd64(logic [39:0] a, output logic [63:0] d, output logic [1:0] r);
    logic [BW-1:0] w;
    cpu.read(a, w, r);
    d = w[64 * a[4:3] +: 64];
  endtask

  // ------------------------------------------------------------ network side
  class pkt_t;
    logic [DW-1:0] d[$];
    logic [KW-1:0] lastkeep;
    int len;
  endclass
  pkt_t sent[NP+1][$];        // what each source sent
  logic [DW+KW:0] macq[NP][$]; // expected beats on each MAC tx
  logic [DW+KW:0] dmaq[$];     // expected beats on the host stream
  int rx_pkts_done = 0;

  function automatic pkt_t make_pkt(int src, int p);
    pkt_t k;
    int nb;
    k = new();
    // port 0 sends a long run of short packets, enough to fill its
    // receive FIFO and the controller's while the CPU is busy
    nb = (src == 0) ? $urandom_range(1, 3) : 8 + $urandom_range(0, 24);
    for (int b = 0; b < nb; b++) k.d.push_back({8'(src), 8'(p), 16'(b), $urandom});
    k.lastkeep = KW'((1 << $urandom_range(1, KW)) - 1);
    k.len = (nb - 1) * 8 + $countones(k.lastkeep);
    return k;
  endfunction

  for (genvar i = 0; i < NP; i++) begin : g_gen
    initial begin
      mac_rx_tvalid[i] = 0; mac_rx_tdata[i] = 0; mac_rx_tkeep[i] = 0; mac_rx_tlast[i] = 0;
      wait (rx_pkts_done == 1);   // start after the boot steps
      for (int p = 0; p < (i == 0 ? PKTS_PORT0 : PKTS_PER_PORT); p++) begin
        pkt_t k;
        k = make_pkt(i, p);
        sent[i].push_back(k);
        for (int b = 0; b < k.d.size(); b++) begin
          @(negedge clk);
          mac_rx_tvalid[i] = 1; mac_rx_tdata[i] = k.d[b]; mac_rx_tlast[i] = (b == k.d.size() - 1);
          mac_rx_tkeep[i] = mac_rx_tlast[i] ? k.lastkeep : '1;
          #1;
          while (!mac_rx_tready[i]) begin @(negedge clk); #1; end
          @(posedge clk);
          #1 mac_rx_tvalid[i] = 0;
        end
      end
    end
    // logger with random back-pressure
    initial begin
      mac_tx_tready[i] = 0;
      forever begin
        @(negedge clk);
        mac_tx_tready[i] = $urandom_range(0, 3) != 0;
        #1;
        if (mac_tx_tvalid[i] && mac_tx_tready[i]) begin
          if (macq[i].size() == 0) chk(0, $sformatf("unexpected beat on port %0d", i));
          else chk({mac_tx_tlast[i], mac_tx_tkeep[i], mac_tx_tdata[i]} == macq[i].pop_front(),
                   $sformatf("echoed beat on port %0d", i));
        end
      end
    end
  end

  // host packet stream (DMA ST-M into the input arbiter)
  initial begin
    pkt_t k;
    dma_rx_tvalid = 0; dma_rx_tdata = 0; dma_rx_tkeep = 0; dma_rx_tlast = 0; dma_rx_tuser = 0;
    wait (rx_pkts_done == 1);
    k = make_pkt(NP, 0);
    sent[NP].push_back(k);
    for (int b = 0; b < k.d.size(); b++) begin
      @(negedge clk);
      dma_rx_tvalid = 1; dma_rx_tdata = k.d[b]; dma_rx_tlast = (b == k.d.size() - 1);
      dma_rx_tkeep = dma_rx_tlast ? k.lastkeep : '1;
      dma_rx_tuser = '0; dma_rx_tuser[15:0] = 16'(k.len); dma_rx_tuser[23:16] = 8'h02;
      #1;
      while (!dma_rx_tready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 dma_rx_tvalid = 0;
    end
  end
  initial begin
    dma_tx_tready = 0;
    forever begin
      @(negedge clk);
      dma_tx_tready = $urandom_range(0, 1) != 0;
      #1;
      if (dma_tx_tvalid && dma_tx_tready) begin
        if (dmaq.size() == 0) chk(0, "unexpected beat on host stream");
        else chk({dma_tx_tlast, dma_tx_tkeep, dma_tx_tdata} == dmaq.pop_front(), "host stream beat");
      end
    end
  end

  // CPU debug unit: consumes command bytes, answers each with its complement
  logic [7:0] dbg_seen[$];
  initial begin
    dbg_to_cpu_ready = 0; dbg_from_cpu_valid = 0; dbg_from_cpu_data = 0;
    forever begin
      @(negedge clk);
      dbg_to_cpu_ready = 1;
      #1;
      if (dbg_to_cpu_valid) begin
        dbg_seen.push_back(dbg_to_cpu_data);
        @(negedge clk);
        dbg_to_cpu_ready = 0;
        dbg_from_cpu_valid = 1; dbg_from_cpu_data = ~dbg_seen[$];
        #1;
        while (!dbg_from_cpu_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        dbg_from_cpu_valid = 0;
      end
    end
  end

  // ------------------------------------------------------------ host emulator
  string banner = "Booting...";
  string console_got = "";
  bit cpu_done = 0;
  initial begin : host_proc
    logic [31:0] d;
    logic [1:0] r;
    host.init();
    wait (rst_n);
    // load the image into DDR3 (32-bit writes widened to 256)
    for (int i = 0; i < 64; i++) host.write(40'h0000_1000 + 40'(4 * i), 32'hC0DE_0000 + 32'(i), 4'hF, r);
    // debug unit: three command bytes, read back three answers
    for (int i = 0; i < 3; i++) host.write(P_DBG + 40'h0, 32'h50 + 32'(i), 4'h1, r);
    repeat (100) @(posedge clk);
    for (int i = 0; i < 3; i++) begin
      host.read(P_DBG + 40'h4, d, r);
      chk(d[8] && d[7:0] == ~8'(8'h50 + i), "debug answer via host");
    end
    // unmapped access
    host.read(40'h80_0000_0000, d, r);
    chk(r == RESP_DECERR, "host sees DECERR on an unmapped address");
    // console: poll while the CPU works
    while (console_got.len() < banner.len()) begin
      host.read(P_CON + 40'h8, d, r);
      if (d[15]) console_got = {console_got, string'(d[7:0])};
    end
    chk(console_got == banner, $sformatf("console text '%s'", console_got));
    host.write(P_CON + 40'h8, 32'h0D, 4'h1, r);   // host types a key
  end

  // ------------------------------------------------------------ CPU emulator
  initial begin : cpu_proc
    logic [63:0] d, meta;
    logic [BW-1:0] w;
    logic [1:0] r;
    int got;
    cpu.init();
    repeat (5) @(posedge clk);
    rst_n = 1;
    // wait for the image, then read it back with 256-bit reads
    repeat (1500) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      cpu.read(40'h0000_1000 + 40'(32 * i), w, r);
      for (int j = 0; j < 8; j++)
        chk(w[32 * j +: 32] == 32'hC0DE_0000 + 32'(8 * i + j), "image word in DDR3");
    end
    // console banner; enable read interrupt
    for (int i = 0; i < banner.len(); i++) cpu_wr32(P_CON + 40'h0, 32'(banner[i]), r);
    cpu_wr32(P_CON + 40'h4, 32'h1, r);
    // a 256-bit write that spans two 32-bit words of a 32-bit slave is refused
    cpu.write(P_CON + 40'h0, '1, 32'hFF, r);
    chk(r == RESP_SLVERR, "wide write to a narrow slave refused");
    // network: enable packet interrupt and start the generators
    cpu_wr64(P_PAC + 40'h38, 64'h4, r);
    rx_pkts_done = 1;
    got = 0;
    while (got < (NP - 1) * PKTS_PER_PORT + PKTS_PORT0 + 1) begin
      int src, nbytes;
      logic [63:0] words[$];
      logic [7:0] lk, dst;
      wait (cpu_int1);
      cpu_rd64(P_PAC + 40'h20, meta, r);
      nbytes = int'(meta[15:0]);
      src = -1;
      for (int i = 0; i < NP; i++) if (meta[23:16] == port_code(i, NP + 1)) src = i;
      if (meta[23:16] == 8'h02) src = NP;
      chk(src >= 0, $sformatf("known source code %h", meta[23:16]));
      if (src < 0) src = 0;
      words.delete();
      do begin
        cpu_rd64(P_PAC + 40'h28, d, r);
        lk = d[7:0];
        cpu_rd64(P_PAC + 40'h30, meta, r);
        words.push_back(meta);
      end while (!d[8]);
      if (sent[src].size() == 0) chk(0, $sformatf("packet from port %0d that was not sent", src));
      else begin
        pkt_t k;
        k = sent[src].pop_front();
        chk(nbytes == k.len, $sformatf("length from port metadata %0d vs %0d", nbytes, k.len));
        chk(words.size() == k.d.size() && lk == k.lastkeep, "packet size and strobe");
        for (int b = 0; b < words.size() && b < k.d.size(); b++) chk(words[b] == k.d[b], "packet word");
        // echo: back to the source port; the host packet goes to port 0 and the host
        dst = (src == NP) ? (port_code(0, NP + 1) | port_code(NP, NP + 1)) : port_code(src, NP + 1);
        if (src == NP) n_multicast++;
        for (int b = 0; b < k.d.size(); b++) begin
          logic [DW+KW:0] e;
          e = {b == k.d.size() - 1, (b == k.d.size() - 1) ? k.lastkeep : 8'hFF, k.d[b]};
          if (src == NP) begin macq[0].push_back(e); dmaq.push_back(e); end
          else macq[src].push_back(e);
        end
        cpu_wr64(P_PAC + 40'h00, {32'd0, dst, 8'd0, 16'(k.len)}, r);
        for (int b = 0; b < k.d.size(); b++) begin
          if (b == k.d.size() - 1) cpu_wr64(P_PAC + 40'h08, {55'd0, 1'b1, k.lastkeep}, r);
          cpu_wr64(P_PAC + 40'h10, k.d[b], r);
        end
      end
      got++;
    end
    // SPI loopback byte
    cpu_wr32(P_SPI + 40'h8, 32'h0, r);
    cpu_wr32(P_SPI + 40'h0, 32'h5A, r);
    repeat (100) @(posedge clk);
    cpu_rd64(P_SPI + 40'h0, d, r);
    chk(d[7:0] == 8'h5A, "SPI loopback byte");
    // I2C with no device: NACK
    cpu_wr32(P_I2C + 40'h0, 32'h0000_0790, r);
    repeat (400) @(posedge clk);
    cpu.read(P_I2C + 40'h4, w, r);
    chk(w[1] == 1'b1 && w[0] == 1'b0, "I2C NACK with no device");
    // console input interrupt
    wait (cpu_int0);
    cpu.read(P_CON + 40'h0, w, r);
    chk(w[15] && w[7:0] == 8'h0D, "CPU reads the host's key");
    cpu_done = 1;
  end

  initial begin
    wait (cpu_done);
    repeat (500) @(posedge clk);
    for (int i = 0; i < NP; i++) chk(macq[i].size() == 0, $sformatf("all echoes left port %0d", i));
    chk(dmaq.size() == 0, "host copy delivered");
    $display("mechanisms: iar_contention=%0d mac_rx_backpressure=%0d oar_backpressure=%0d int1=%0d int0=%0d both_masters=%0d decerr=%0d multicast=%0d upsize=%0d downsize=%0d",
             n_iar_contend, n_rx_backpressure, n_tx_backpressure, n_int1, n_int0,
             n_both_masters, n_decerr, n_multicast, n_up, n_down);
    chk(n_iar_contend > 0, "input arbiter contention happened");
    chk(n_rx_backpressure > 0, "MAC receive back-pressure happened");
    chk(n_tx_backpressure > 0, "output back-pressure happened");
    chk(n_int1 > 0, "packet interrupt happened");
    chk(n_int0 > 0, "console interrupt happened");
    chk(n_both_masters > 0, "both masters active together");
    chk(n_decerr > 0, "decode error happened");
    chk(n_multicast > 0, "multicast happened");
    chk(n_up > 0 && n_down > 0, "width adaptation both ways");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
