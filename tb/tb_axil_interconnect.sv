// tb_axil_interconnect: two masters issue random reads and writes at the
// same time to three memory slaves with random response delays and to an
// unmapped address. A reference memory per slave predicts every read; an
// unmapped access must return DECERR; both masters must be served while
// the other is waiting (round-robin), and each slave must see only
// addresses inside its window. Small address map: slave s at s*0x100.
module tb_axil_interconnect;
  localparam int NM = 2, NS = 3, AW = 16, DW = 64, SW = 8, OPS = 300;
  localparam logic [NS-1:0][AW-1:0] BASE = {16'h0200, 16'h0100, 16'h0000};
  localparam logic [NS-1:0][AW-1:0] MASK = {16'hff00, 16'hff00, 16'hff00};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_bfm #(.ADDR_W(AW), .DATA_W(DW)) mb[NM] (clk);

  logic [NM-1:0][AW-1:0] s_awaddr, s_araddr;
  logic [NM-1:0][DW-1:0] s_wdata, s_rdata;
  logic [NM-1:0][SW-1:0] s_wstrb;
  logic [NM-1:0][1:0]    s_bresp, s_rresp;
  logic [NM-1:0] s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready,
                 s_arvalid, s_arready, s_rvalid, s_rready;
  logic [NS-1:0][AW-1:0] m_awaddr, m_araddr;
  logic [NS-1:0][DW-1:0] m_wdata, m_rdata;
  logic [NS-1:0][SW-1:0] m_wstrb;
  logic [NS-1:0][1:0]    m_bresp, m_rresp;
  logic [NS-1:0] m_awvalid, m_awready, m_wvalid, m_wready, m_bvalid, m_bready,
                 m_arvalid, m_arready, m_rvalid, m_rready;
  int checks = 0, failures = 0, overlaps = 0;

  axil_interconnect #(.NUM_M(NM), .NUM_S(NS), .ADDR_W(AW), .DATA_W(DW),
                      .SLV_BASE(BASE), .SLV_MASK(MASK)) dut (.*);

  for (genvar m = 0; m < NM; m++) begin : g_m
    assign s_awaddr[m] = mb[m].awaddr;  assign s_awvalid[m] = mb[m].awvalid;
    assign mb[m].awready = s_awready[m];
    assign s_wdata[m] = mb[m].wdata;    assign s_wstrb[m] = mb[m].wstrb;
    assign s_wvalid[m] = mb[m].wvalid;  assign mb[m].wready = s_wready[m];
    assign mb[m].bresp = s_bresp[m];    assign mb[m].bvalid = s_bvalid[m];
    assign s_bready[m] = mb[m].bready;
    assign s_araddr[m] = mb[m].araddr;  assign s_arvalid[m] = mb[m].arvalid;
    assign mb[m].arready = s_arready[m];
    assign mb[m].rdata = s_rdata[m];    assign mb[m].rresp = s_rresp[m];
    assign mb[m].rvalid = s_rvalid[m];  assign s_rready[m] = mb[m].rready;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // slave memories: 32 words each, random latency
  logic [DW-1:0] smem[NS][32];
  for (genvar s = 0; s < NS; s++) begin : g_s
    initial begin
      for (int i = 0; i < 32; i++) smem[s][i] = '0;
      m_awready[s] = 0; m_wready[s] = 0; m_bvalid[s] = 0; m_bresp[s] = 0;
      m_arready[s] = 0; m_rvalid[s] = 0; m_rdata[s] = 0; m_rresp[s] = 0;
      forever begin
        @(negedge clk);
        #1;
        if (m_awvalid[s] && m_wvalid[s]) begin
          logic [AW-1:0] a;
          a = m_awaddr[s];
          chk((a & MASK[s]) == BASE[s], "write inside slave window");
          repeat ($urandom_range(0, 3)) @(negedge clk);
          m_awready[s] = 1; m_wready[s] = 1;
          for (int b = 0; b < SW; b++)
            if (m_wstrb[s][b]) smem[s][a[7:3]][8*b +: 8] = m_wdata[s][8*b +: 8];
          @(negedge clk);
          m_awready[s] = 0; m_wready[s] = 0;
          repeat ($urandom_range(0, 3)) @(negedge clk);
          m_bvalid[s] = 1; m_bresp[s] = 2'b00;
          #1;
          while (!m_bready[s]) begin @(negedge clk); #1; end
          @(negedge clk);
          m_bvalid[s] = 0;
        end else if (m_arvalid[s]) begin
          logic [AW-1:0] a;
          a = m_araddr[s];
          chk((a & MASK[s]) == BASE[s], "read inside slave window");
          repeat ($urandom_range(0, 3)) @(negedge clk);
          m_arready[s] = 1;
          @(negedge clk);
          m_arready[s] = 0;
          repeat ($urandom_range(0, 3)) @(negedge clk);
          m_rvalid[s] = 1; m_rdata[s] = smem[s][a[7:3]]; m_rresp[s] = 2'b00;
          #1;
          while (!m_rready[s]) begin @(negedge clk); #1; end
          @(negedge clk);
          m_rvalid[s] = 0;
        end
      end
    end
  end

  // reference model: each master owns its own words (no races between masters)
  logic [DW-1:0] ref_mem[NS][32];
  int done_m = 0;
  int busy_m[NM];
  for (genvar m = 0; m < NM; m++) begin : g_drv
    initial begin
      logic [DW-1:0] d, e;
      logic [1:0] resp;
      busy_m[m] = 0;
      mb[m].init();
      wait (rst_n);
      for (int op = 0; op < OPS; op++) begin
        int s, w;
        logic [AW-1:0] a;
        logic [SW-1:0] st;
        s = $urandom_range(0, NS);            // NS = unmapped
        w = 2 * $urandom_range(0, 15) + m;    // master m owns odd/even words
        a = (s == NS) ? 16'h0800 + AW'(w * 8) : BASE[s] + AW'(w * 8);
        busy_m[m] = 1;
        if ($urandom_range(0, 1)) begin
          d = {$urandom, $urandom};
          st = SW'($urandom);
          mb[m].write(a, d, st, resp);
          if (s == NS) chk(resp == 2'b11, "unmapped write gets DECERR");
          else begin
            chk(resp == 2'b00, "write OKAY");
            for (int b = 0; b < SW; b++) if (st[b]) ref_mem[s][w][8*b +: 8] = d[8*b +: 8];
          end
        end else begin
          mb[m].read(a, d, resp);
          if (s == NS) chk(resp == 2'b11, "unmapped read gets DECERR");
          else chk(resp == 2'b00 && d == ref_mem[s][w], $sformatf("read m%0d s%0d w%0d", m, s, w));
        end
        busy_m[m] = 0;
      end
      done_m++;
    end
  end

  always @(posedge clk) if (busy_m[0] && busy_m[1]) overlaps++;

  initial begin
    for (int s = 0; s < NS; s++) for (int i = 0; i < 32; i++) ref_mem[s][i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done_m == NM);
    chk(overlaps > 100, "both masters active at the same time");
    $display("overlap cycles=%0d", overlaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
