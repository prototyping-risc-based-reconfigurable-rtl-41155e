// axil_interconnect: the AXI bus interconnect of the control plane.
//
// NUM_M masters (the CPU and the DMA engine's host-access master) reach
// NUM_S slaves (DDR3 controller, console, SPI, I2C, serial debugger,
// packet controller, DMA registers) through one shared AXI4-Lite path of
// DATA_W bits. When idle the interconnect picks, round-robin from the
// master after the last one served, a master with a complete write (AW
// and W valid) or a read (AR valid); it registers the request, decodes the
// address against SLV_BASE/SLV_MASK (slave s is hit when
// (addr & mask) == base), issues it to that slave, waits for the response
// and hands it back. An address that hits no slave is answered with
// DECERR without touching any slave. One transaction is in flight at a
// time; latency is three cycles plus the slave's. Narrower ports are
// adapted outside with axil_width_conv. That both masters see every slave
// follows the architecture; the shared single-transaction bus, the address
// map and AXI4-Lite only (no bursts) are this design's choices.
module axil_interconnect
  import netsoc_pkg::*;
#(
  parameter int NUM_M  = 2,
  parameter int NUM_S  = NUM_SLAVES,
  parameter int ADDR_W = SYS_ADDR_W,
  parameter int DATA_W = 256,
  parameter logic [NUM_S-1:0][ADDR_W-1:0] SLV_BASE = map_base(),
  parameter logic [NUM_S-1:0][ADDR_W-1:0] SLV_MASK = map_mask(),
  localparam int STRB_W = DATA_W / 8,
  localparam int MI = (NUM_M > 1) ? $clog2(NUM_M) : 1,
  localparam int SI = (NUM_S > 1) ? $clog2(NUM_S) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // master side (one port per master)
  input  logic [NUM_M-1:0][ADDR_W-1:0]   s_awaddr,
  input  logic [NUM_M-1:0]               s_awvalid,
  output logic [NUM_M-1:0]               s_awready,
  input  logic [NUM_M-1:0][DATA_W-1:0]   s_wdata,
  input  logic [NUM_M-1:0][STRB_W-1:0]   s_wstrb,
  input  logic [NUM_M-1:0]               s_wvalid,
  output logic [NUM_M-1:0]               s_wready,
  output logic [NUM_M-1:0][1:0]          s_bresp,
  output logic [NUM_M-1:0]               s_bvalid,
  input  logic [NUM_M-1:0]               s_bready,
  input  logic [NUM_M-1:0][ADDR_W-1:0]   s_araddr,
  input  logic [NUM_M-1:0]               s_arvalid,
  output logic [NUM_M-1:0]               s_arready,
  output logic [NUM_M-1:0][DATA_W-1:0]   s_rdata,
  output logic [NUM_M-1:0][1:0]          s_rresp,
  output logic [NUM_M-1:0]               s_rvalid,
  input  logic [NUM_M-1:0]               s_rready,
  // slave side (one port per slave)
  output logic [NUM_S-1:0][ADDR_W-1:0]   m_awaddr,
  output logic [NUM_S-1:0]               m_awvalid,
  input  logic [NUM_S-1:0]               m_awready,
  output logic [NUM_S-1:0][DATA_W-1:0]   m_wdata,
  output logic [NUM_S-1:0][STRB_W-1:0]   m_wstrb,
  output logic [NUM_S-1:0]               m_wvalid,
  input  logic [NUM_S-1:0]               m_wready,
  input  logic [NUM_S-1:0][1:0]          m_bresp,
  input  logic [NUM_S-1:0]               m_bvalid,
  output logic [NUM_S-1:0]               m_bready,
  output logic [NUM_S-1:0][ADDR_W-1:0]   m_araddr,
  output logic [NUM_S-1:0]               m_arvalid,
  input  logic [NUM_S-1:0]               m_arready,
  input  logic [NUM_S-1:0][DATA_W-1:0]   m_rdata,
  input  logic [NUM_S-1:0][1:0]          m_rresp,
  input  logic [NUM_S-1:0]               m_rvalid,
  output logic [NUM_S-1:0]               m_rready
);


  typedef enum logic [2:0] {IDLE, DECODE, ISSUE, WAIT, RESP} state_e;
  state_e state;

  logic [MI-1:0]     mst, last_mst, pick;
  logic              pick_any, pick_wr;
  logic              is_wr, hit, aw_done, w_done;
  logic [SI-1:0]     slv;
  logic [ADDR_W-1:0] addr;
  logic [DATA_W-1:0] data;
  logic [STRB_W-1:0] strb;
  logic [1:0]        resp;

  // round-robin choice of a master with a request
  always_comb begin
    pick     = last_mst;
    pick_any = 1'b0;
    pick_wr  = 1'b0;
    for (int k = 1; k <= NUM_M; k++) begin
      automatic int m = (int'(last_mst) + k) % NUM_M;
      if (!pick_any && ((s_awvalid[m] && s_wvalid[m]) || s_arvalid[m])) begin
        pick     = MI'(m);
        pick_any = 1'b1;
        pick_wr  = s_awvalid[m] && s_wvalid[m];
      end
    end
  end

  // address decode of the registered request
  logic [SI-1:0] dec_slv;
  logic          dec_hit;
  always_comb begin
    dec_slv = '0;
    dec_hit = 1'b0;
    for (int s = NUM_S - 1; s >= 0; s--)
      if ((addr & SLV_MASK[s]) == SLV_BASE[s]) begin
        dec_slv = SI'(s);
        dec_hit = 1'b1;
      end
  end

  wire take = (state == IDLE) && pick_any;

  // master-side handshakes
  always_comb begin
    s_awready = '0;
    s_wready  = '0;
    s_arready = '0;
    s_bvalid  = '0;
    s_rvalid  = '0;
    for (int m = 0; m < NUM_M; m++) begin
      s_bresp[m] = resp;
      s_rresp[m] = resp;
      s_rdata[m] = data;
    end
    if (take) begin
      if (pick_wr) begin
        s_awready[pick] = 1'b1;
        s_wready[pick]  = 1'b1;
      end else begin
        s_arready[pick] = 1'b1;
      end
    end
    if (state == RESP) begin
      if (is_wr) s_bvalid[mst] = 1'b1;
      else       s_rvalid[mst] = 1'b1;
    end
  end

  // slave-side handshakes
  always_comb begin
    for (int s = 0; s < NUM_S; s++) begin
      m_awaddr[s] = addr;
      m_araddr[s] = addr;
      m_wdata[s]  = data;
      m_wstrb[s]  = strb;
    end
    m_awvalid = '0;
    m_wvalid  = '0;
    m_arvalid = '0;
    m_bready  = '0;
    m_rready  = '0;
    if (state == ISSUE && hit) begin
      if (is_wr) begin
        m_awvalid[slv] = !aw_done;
        m_wvalid[slv]  = !w_done;
      end else begin
        m_arvalid[slv] = 1'b1;
      end
    end
    if (state == WAIT) begin
      if (is_wr) m_bready[slv] = 1'b1;
      else       m_rready[slv] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= IDLE;
      mst      <= '0;
      last_mst <= MI'(NUM_M - 1);
      is_wr    <= 1'b0;
      hit      <= 1'b0;
      slv      <= '0;
      addr     <= '0;
      data     <= '0;
      strb     <= '0;
      resp     <= RESP_OKAY;
      aw_done  <= 1'b0;
      w_done   <= 1'b0;
    end else begin
      unique case (state)
        IDLE: if (take) begin
          mst     <= pick;
          is_wr   <= pick_wr;
          addr    <= pick_wr ? s_awaddr[pick] : s_araddr[pick];
          data    <= s_wdata[pick];
          strb    <= s_wstrb[pick];
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          state   <= DECODE;
        end
        DECODE: begin
          slv <= dec_slv;
          hit <= dec_hit;
          if (dec_hit) state <= ISSUE;
          else begin
            resp  <= RESP_DECERR;
            data  <= '0;
            state <= RESP;
          end
        end
        ISSUE: begin
          if (is_wr) begin
            if (m_awready[slv]) aw_done <= 1'b1;
            if (m_wready[slv])  w_done  <= 1'b1;
            if ((aw_done || m_awready[slv]) && (w_done || m_wready[slv])) state <= WAIT;
          end else if (m_arready[slv]) begin
            state <= WAIT;
          end
        end
        WAIT: begin
          if (is_wr && m_bvalid[slv]) begin
            resp  <= m_bresp[slv];
            state <= RESP;
          end else if (!is_wr && m_rvalid[slv]) begin
            resp  <= m_rresp[slv];
            data  <= m_rdata[slv];
            state <= RESP;
          end
        end
        RESP: if ((is_wr && s_bready[mst]) || (!is_wr && s_rready[mst])) begin
          last_mst <= mst;
          state    <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // AXI: a response, once valid, is held until accepted
  for (genvar m = 0; m < NUM_M; m++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     s_bvalid[m] && !s_bready[m] |=> s_bvalid[m]);
    assert property (@(posedge clk) disable iff (!rst_n)
                     s_rvalid[m] && !s_rready[m] |=> s_rvalid[m]);
  end

endmodule
