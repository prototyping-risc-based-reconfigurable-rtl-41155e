// input_arbiter: the IAR. Merges NUM_IN packet streams into one.
//
// Inputs 0..NUM_IN-2 are the receive sides of the 10GbE ports, input
// NUM_IN-1 is the DMA (host) stream. When idle the arbiter grants the first
// input with a valid beat, searching round-robin from the input after the
// last one served; the grant then holds for the whole packet and is
// released after the tlast beat, so packets are never interleaved. The
// chosen input's beat goes straight through (no register): zero latency,
// and a new packet can start in the cycle after a tlast. Round-robin
// arbitration follows the architecture; packet granularity is this
// design's choice.
module input_arbiter
  import netsoc_pkg::*;
#(
  parameter int NUM_IN = 5,
  parameter int DATA_W = STREAM_DATA_W,
  parameter int USER_W = STREAM_USER_W,
  localparam int KEEP_W = DATA_W / 8,
  localparam int IW     = $clog2(NUM_IN)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NUM_IN-1:0][DATA_W-1:0] s_tdata,
  input  logic [NUM_IN-1:0][KEEP_W-1:0] s_tkeep,
  input  logic [NUM_IN-1:0][USER_W-1:0] s_tuser,
  input  logic [NUM_IN-1:0]             s_tlast,
  input  logic [NUM_IN-1:0]             s_tvalid,
  output logic [NUM_IN-1:0]             s_tready,
  output logic [DATA_W-1:0]             m_tdata,
  output logic [KEEP_W-1:0]             m_tkeep,
  output logic [USER_W-1:0]             m_tuser,
  output logic                          m_tlast,
  output logic                          m_tvalid,
  input  logic                          m_tready
);

  logic          locked;
  logic [IW-1:0] cur, last, pick, sel;
  logic          any;

  // round-robin search starting after the last input served
  always_comb begin
    pick = last;
    any  = 1'b0;
    for (int k = 1; k <= NUM_IN; k++) begin
      automatic int idx = (int'(last) + k) % NUM_IN;
      if (!any && s_tvalid[idx]) begin
        pick = IW'(idx);
        any  = 1'b1;
      end
    end
  end

  assign sel      = locked ? cur : pick;
  assign m_tvalid = locked ? s_tvalid[cur] : any;
  assign m_tdata  = s_tdata[sel];
  assign m_tkeep  = s_tkeep[sel];
  assign m_tuser  = s_tuser[sel];
  assign m_tlast  = s_tlast[sel];

  always_comb begin
    s_tready = '0;
    if (m_tvalid) s_tready[sel] = m_tready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      locked <= 1'b0;
      cur    <= '0;
      last   <= IW'(NUM_IN - 1);
    end else if (m_tvalid && m_tready) begin
      if (m_tlast) begin
        locked <= 1'b0;
        last   <= sel;
      end else begin
        locked <= 1'b1;
        cur    <= sel;
      end
    end
  end

endmodule
