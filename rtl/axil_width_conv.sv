// axil_width_conv: AXI4-Lite data-width adapter between a master-side
// port of S_DATA_W bits and a slave-side port of M_DATA_W bits.
//
// Each transfer is registered: a write waits for both AW and W, is issued
// downstream, and its B is passed back; a read is issued and its R passed
// back. Going wider (S < M), write data is replicated across the wide word
// and the strobe placed in the lane given by the address; read data is
// taken from that lane. Going narrower (S > M), the lane given by the
// address is sent down and read data is replicated across the wide word; a
// write whose strobe touches bytes outside that lane is refused with
// SLVERR and not issued. One transfer at a time, writes before reads.
// Latency: two cycles plus the slave's. Helper of the interconnect; the
// widths come from the system diagram (32/64/256 bits), the adapter itself
// is this design's.
module axil_width_conv
  import netsoc_pkg::*;
#(
  parameter int ADDR_W   = 40,
  parameter int S_DATA_W = 32,
  parameter int M_DATA_W = 256,
  localparam int SW = S_DATA_W / 8,
  localparam int MW = M_DATA_W / 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [ADDR_W-1:0]   s_awaddr,
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [S_DATA_W-1:0] s_wdata,
  input  logic [SW-1:0]       s_wstrb,
  input  logic                s_wvalid,
  output logic                s_wready,
  output logic [1:0]          s_bresp,
  output logic                s_bvalid,
  input  logic                s_bready,
  input  logic [ADDR_W-1:0]   s_araddr,
  input  logic                s_arvalid,
  output logic                s_arready,
  output logic [S_DATA_W-1:0] s_rdata,
  output logic [1:0]          s_rresp,
  output logic                s_rvalid,
  input  logic                s_rready,
  output logic [ADDR_W-1:0]   m_awaddr,
  output logic                m_awvalid,
  input  logic                m_awready,
  output logic [M_DATA_W-1:0] m_wdata,
  output logic [MW-1:0]       m_wstrb,
  output logic                m_wvalid,
  input  logic                m_wready,
  input  logic [1:0]          m_bresp,
  input  logic                m_bvalid,
  output logic                m_bready,
  output logic [ADDR_W-1:0]   m_araddr,
  output logic                m_arvalid,
  input  logic                m_arready,
  input  logic [M_DATA_W-1:0] m_rdata,
  input  logic [1:0]          m_rresp,
  input  logic                m_rvalid,
  output logic                m_rready
);

  localparam bit UP    = S_DATA_W < M_DATA_W;
  localparam int RATIO = UP ? M_DATA_W / S_DATA_W : S_DATA_W / M_DATA_W;
  localparam int LB    = $clog2(UP ? SW : MW);       // low byte-address bits
  localparam int LW    = (RATIO > 1) ? $clog2(RATIO) : 1;

  typedef enum logic [2:0] {IDLE, WR, WR_B, B_OUT, RD, RD_R, R_OUT} state_e;
  state_e state;

  logic [ADDR_W-1:0]   addr;
  logic [M_DATA_W-1:0] wdata;
  logic [MW-1:0]       wstrb;
  logic [S_DATA_W-1:0] rdata;
  logic [1:0]          resp;
  logic                aw_done, w_done;

  // lane of an address
  function automatic logic [LW-1:0] lane_of(logic [ADDR_W-1:0] a);
    return (RATIO > 1) ? LW'(a >> LB) : '0;
  endfunction

  // downstream write word/strobe for an upstream write, and upstream read
  // word from a downstream read word
  logic [M_DATA_W-1:0] cv_wdata;
  logic [MW-1:0]       cv_wstrb;
  logic                cv_ok;
  logic [S_DATA_W-1:0] cv_rdata;

  if (UP) begin : g_up
    always_comb begin
      cv_wdata = '0;
      cv_wstrb = '0;
      cv_ok    = 1'b1;
      for (int l = 0; l < RATIO; l++) begin
        cv_wdata[l*S_DATA_W +: S_DATA_W] = s_wdata;
        if (LW'(l) == lane_of(s_awaddr)) cv_wstrb[l*SW +: SW] = s_wstrb;
      end
    end
    always_comb begin
      cv_rdata = '0;
      for (int l = 0; l < RATIO; l++)
        if (LW'(l) == lane_of(addr)) cv_rdata = m_rdata[l*S_DATA_W +: S_DATA_W];
    end
  end else begin : g_down
    always_comb begin
      cv_wdata = '0;
      cv_wstrb = '0;
      cv_ok    = 1'b1;
      for (int l = 0; l < RATIO; l++) begin
        if (LW'(l) == lane_of(s_awaddr)) begin
          cv_wdata = s_wdata[l*M_DATA_W +: M_DATA_W];
          cv_wstrb = s_wstrb[l*MW +: MW];
        end else if (s_wstrb[l*MW +: MW] != '0) begin
          cv_ok = 1'b0;
        end
      end
    end
    always_comb begin
      for (int l = 0; l < RATIO; l++) cv_rdata[l*M_DATA_W +: M_DATA_W] = m_rdata;
    end
  end

  wire take_w = (state == IDLE) && s_awvalid && s_wvalid;
  wire take_r = (state == IDLE) && !take_w && s_arvalid;

  assign s_awready = take_w;
  assign s_wready  = take_w;
  assign s_arready = take_r;
  assign s_bvalid  = (state == B_OUT);
  assign s_bresp   = resp;
  assign s_rvalid  = (state == R_OUT);
  assign s_rresp   = resp;
  assign s_rdata   = rdata;

  assign m_awaddr  = addr;
  assign m_awvalid = (state == WR) && !aw_done;
  assign m_wdata   = wdata;
  assign m_wstrb   = wstrb;
  assign m_wvalid  = (state == WR) && !w_done;
  assign m_bready  = (state == WR_B);
  assign m_araddr  = addr;
  assign m_arvalid = (state == RD);
  assign m_rready  = (state == RD_R);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= IDLE;
      addr    <= '0;
      wdata   <= '0;
      wstrb   <= '0;
      rdata   <= '0;
      resp    <= RESP_OKAY;
      aw_done <= 1'b0;
      w_done  <= 1'b0;
    end else begin
      unique case (state)
        IDLE: begin
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          if (take_w) begin
            addr  <= s_awaddr;
            wdata <= cv_wdata;
            wstrb <= cv_wstrb;
            if (cv_ok) state <= WR;
            else begin
              resp  <= RESP_SLVERR;
              state <= B_OUT;
            end
          end else if (take_r) begin
            addr  <= s_araddr;
            state <= RD;
          end
        end
        WR: begin
          if (m_awready) aw_done <= 1'b1;
          if (m_wready)  w_done  <= 1'b1;
          if ((aw_done || m_awready) && (w_done || m_wready)) state <= WR_B;
        end
        WR_B: if (m_bvalid) begin
          resp  <= m_bresp;
          state <= B_OUT;
        end
        B_OUT: if (s_bready) state <= IDLE;
        RD: if (m_arready) state <= RD_R;
        RD_R: if (m_rvalid) begin
          resp  <= m_rresp;
          rdata <= cv_rdata;
          state <= R_OUT;
        end
        R_OUT: if (s_rready) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

endmodule
