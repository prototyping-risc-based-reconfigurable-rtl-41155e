// tb_axis_pkt_fifo: random packets through the store-and-forward FIFO with
// random source gaps and sink back-pressure. Checks every beat (data,
// strobe, last, user), the reported length against an independent byte
// count, that no beat of a packet appears before its last beat went in,
// and that the FIFO fills and stalls the writer (small DEPTH).
module tb_axis_pkt_fifo;
  localparam int DW = 64, KW = 8, UW = 128, DEPTH = 16, NPKT = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [DW-1:0] s_tdata, m_tdata;
  logic [KW-1:0] s_tkeep, m_tkeep;
  logic [UW-1:0] s_tuser, m_tuser;
  logic s_tlast, s_tvalid, s_tready, m_tlast, m_tvalid, m_tready;
  logic [15:0] m_len;
  logic [5:0]  pkt_count;
  int checks = 0, failures = 0, stalls = 0;

  axis_pkt_fifo #(.DATA_W(DW), .USER_W(UW), .DEPTH(DEPTH), .PKTS(32)) dut (.*);

  // expected beats
  typedef struct { logic [DW-1:0] d; logic [KW-1:0] k; logic l; logic [UW-1:0] u; } beat_t;
  beat_t q[$];
  int    lens[$];
  int    pkts_in = 0, pkts_out = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : src
    s_tvalid = 0; s_tdata = 0; s_tkeep = 0; s_tlast = 0; s_tuser = 0;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    for (int p = 0; p < NPKT; p++) begin
      int nb, bytes;
      logic [UW-1:0] u;
      nb = 1 + $urandom_range(0, DEPTH - 2);
      bytes = 0;
      u = {$urandom, $urandom, $urandom, $urandom};
      for (int b = 0; b < nb; b++) begin
        beat_t bt;
        bt.d = {$urandom, $urandom};
        bt.k = (b == nb - 1) ? KW'((1 << $urandom_range(1, KW)) - 1) : '1;
        bt.l = (b == nb - 1);
        bt.u = u;
        for (int i = 0; i < KW; i++) bytes += bt.k[i];
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        @(negedge clk);
        s_tvalid = 1; s_tdata = bt.d; s_tkeep = bt.k; s_tlast = bt.l;
        s_tuser = (b == 0) ? u : ~u;   // only the first beat's tuser counts
        #1;
        while (!s_tready) begin stalls++; @(negedge clk); #1; end
        q.push_back(bt);
        if (bt.l) begin lens.push_back(bytes); end
        @(posedge clk);
        #1 s_tvalid = 0;
      end
      pkts_in++;
    end
  end

  // sink
  int beat_in_pkt = 0;
  initial begin : sink
    m_tready = 0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      m_tready = ($urandom_range(0, 2) != 0) && (pkts_in > 20 || $time > 40000);
      #1;
      // store-and-forward: a visible head packet is completely written
      if (m_tvalid) chk(lens.size() > 0 && q.size() > 0 && q[0].d == m_tdata, "head packet complete");
      if (m_tvalid && m_tready) begin
        beat_t e;
        e = q.pop_front();
        chk(m_tdata == e.d && m_tkeep == e.k && m_tlast == e.l, "beat content");
        chk(m_tuser == e.u, "tuser of first beat");
        if (beat_in_pkt == 0) chk(32'(m_len) == lens[0], $sformatf("length %0d vs %0d", m_len, lens[0]));
        beat_in_pkt++;
        if (m_tlast) begin void'(lens.pop_front()); pkts_out++; beat_in_pkt = 0; end
      end
    end
  end

  initial begin
    wait (pkts_out == NPKT);
    repeat (5) @(posedge clk);
    chk(!m_tvalid && pkt_count == 0, "empty at end");
    chk(stalls > 0, "writer stalled on full FIFO at least once");
    $display("stalls=%0d", stalls);
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
