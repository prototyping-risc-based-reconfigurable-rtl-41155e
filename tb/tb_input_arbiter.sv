// tb_input_arbiter: five sources send numbered packets at random times
// into the input arbiter, the sink applies random back-pressure. Checks
// that packets are never interleaved, that every packet arrives intact and
// in order per source, and that when several sources wait the grant
// rotates round-robin (the next grant goes to the first waiting source
// after the last one served).
module tb_input_arbiter;
  localparam int N = 5, DW = 64, KW = 8, UW = 128, NPKT = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0][DW-1:0] s_tdata;
  logic [N-1:0][KW-1:0] s_tkeep;
  logic [N-1:0][UW-1:0] s_tuser;
  logic [N-1:0] s_tlast, s_tvalid, s_tready;
  logic [DW-1:0] m_tdata;
  logic [KW-1:0] m_tkeep;
  logic [UW-1:0] m_tuser;
  logic m_tlast, m_tvalid, m_tready;
  int checks = 0, failures = 0, contended = 0;
  int done_src = 0;

  input_arbiter #(.NUM_IN(N)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // beat word: {src, pkt, beat}
  for (genvar i = 0; i < N; i++) begin : g_src
    initial begin
      s_tvalid[i] = 0; s_tlast[i] = 0; s_tdata[i] = 0; s_tkeep[i] = '1; s_tuser[i] = 0;
      wait (rst_n);
      for (int p = 0; p < NPKT; p++) begin
        int nb;
        nb = 1 + $urandom_range(0, 5);
        repeat ($urandom_range(0, 6)) @(negedge clk);
        for (int b = 0; b < nb; b++) begin
          @(negedge clk);
          s_tvalid[i] = 1; s_tdata[i] = {32'(i), 16'(p), 16'(b)}; s_tlast[i] = (b == nb - 1);
          s_tuser[i] = UW'(i);
          #1;
          while (!s_tready[i]) begin @(negedge clk); #1; end
          @(posedge clk);
          #1 s_tvalid[i] = 0;
        end
      end
      done_src++;
    end
  end

  int exp_pkt[N], exp_beat[N];
  int cur = -1, last = N - 1;
  initial begin
    m_tready = 0;
    for (int i = 0; i < N; i++) begin exp_pkt[i] = 0; exp_beat[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    forever begin
      @(negedge clk);
      m_tready = $urandom_range(0, 3) != 0;
      #1;
      if (m_tvalid && m_tready) begin
        int src;
        src = int'(m_tdata[63:32]);
        if (cur < 0) begin
          // start of a packet: must be the first waiting source after last
          int want;
          want = -1;
          for (int k = 1; k <= N; k++)
            if (want < 0 && s_tvalid[(last + k) % N]) want = (last + k) % N;
          if ($countones(s_tvalid) > 1) contended++;
          chk(src == want, $sformatf("round-robin grant %0d expected %0d", src, want));
          cur = src;
        end
        chk(src == cur, "no interleaving");
        chk(int'(m_tdata[31:16]) == exp_pkt[src] && int'(m_tdata[15:0]) == exp_beat[src],
            "packet order and content");
        chk(m_tuser == UW'(src), "tuser passes through");
        exp_beat[src]++;
        if (m_tlast) begin exp_pkt[src]++; exp_beat[src] = 0; last = cur; cur = -1; end
      end
    end
  end

  initial begin
    wait (done_src == N);
    repeat (10) @(posedge clk);
    for (int i = 0; i < N; i++) chk(exp_pkt[i] == NPKT, "all packets of each source");
    chk(contended > 10, "arbitration between waiting sources happened");
    $display("contended grants=%0d", contended);
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
