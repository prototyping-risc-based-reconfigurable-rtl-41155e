// tb_output_arbiter: packets with random destination sets (single port,
// several ports, DMA, none) go through the output arbiter while each
// output applies random back-pressure. Every output must receive exactly
// the packets whose destination names it, intact and in order; packets
// with no destination disappear.
module tb_output_arbiter;
  import netsoc_pkg::*;
  localparam int N = 5, DW = 64, KW = 8, UW = 128, NPKT = 120;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [DW-1:0] s_tdata;
  logic [KW-1:0] s_tkeep;
  logic [UW-1:0] s_tuser;
  logic s_tlast, s_tvalid, s_tready;
  logic [N-1:0][DW-1:0] m_tdata;
  logic [N-1:0][KW-1:0] m_tkeep;
  logic [N-1:0][UW-1:0] m_tuser;
  logic [N-1:0] m_tlast, m_tvalid, m_tready;
  int checks = 0, failures = 0, multicast = 0, dropped = 0;
  bit src_done = 0;

  output_arbiter #(.NUM_OUT(N)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [DW-1:0] expq[N][$];

  initial begin
    s_tvalid = 0; s_tdata = 0; s_tkeep = '1; s_tuser = 0; s_tlast = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPKT; p++) begin
      int nb;
      logic [N-1:0] dests;
      logic [7:0] code;
      nb = 1 + $urandom_range(0, 4);
      dests = N'($urandom_range(0, (1 << N) - 1));
      if (p % 3 != 0) begin dests = '0; dests[$urandom_range(0, N - 1)] = 1'b1; end
      code = '0;
      for (int i = 0; i < N; i++) if (dests[i]) code |= port_code(i, N);
      if ($countones(dests) > 1) multicast++;
      if (dests == 0) dropped++;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        s_tvalid = 1; s_tdata = {16'(p), 16'(b), 32'(dests)}; s_tlast = (b == nb - 1);
        s_tuser = '0; s_tuser[31:24] = code;
        for (int i = 0; i < N; i++) if (dests[i]) expq[i].push_back(s_tdata);
        #1;
        while (!s_tready) begin @(negedge clk); #1; end
        @(posedge clk);
        #1 s_tvalid = 0;
      end
    end
    src_done = 1;
  end

  for (genvar i = 0; i < N; i++) begin : g_sink
    initial begin
      m_tready[i] = 0;
      wait (rst_n);
      forever begin
        @(negedge clk);
        m_tready[i] = $urandom_range(0, 2) != 0;
        #1;
        if (m_tvalid[i] && m_tready[i]) begin
          logic [DW-1:0] e;
          if (expq[i].size() == 0) chk(0, $sformatf("unexpected beat on output %0d", i));
          else begin
            e = expq[i].pop_front();
            chk(m_tdata[i] == e, $sformatf("output %0d beat", i));
          end
        end
      end
    end
  end

  initial begin
    wait (src_done);
    repeat (50) @(posedge clk);
    for (int i = 0; i < N; i++) chk(expq[i].size() == 0, $sformatf("output %0d got all", i));
    chk(multicast > 0 && dropped > 0, "multicast and drop cases exercised");
    $display("multicast=%0d dropped=%0d", multicast, dropped);
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
