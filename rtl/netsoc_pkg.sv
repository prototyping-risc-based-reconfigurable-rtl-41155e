// netsoc_pkg: types and constants shared by the NetSoC networking and
// control-plane blocks.
//
// Packet streams are AXI4-Stream, 64 data bits wide, with a 128-bit tuser
// that carries per-packet metadata on every beat of the packet:
//   [15:0]  packet length in bytes
//   [23:16] source port, one-hot
//   [31:24] destination port(s), one-hot
// Port encoding follows the NetFPGA convention: physical port i is bit 2*i,
// the DMA (host) stream is bit 1. The stream width, the tuser layout and the
// address map below are choices of this design; the architecture only says
// that length and source-port metadata travel with every packet and that all
// peripherals are memory mapped.
package netsoc_pkg;

  localparam int STREAM_DATA_W = 64;
  localparam int STREAM_KEEP_W = STREAM_DATA_W / 8;
  localparam int STREAM_USER_W = 128;

  typedef struct packed {
    logic [95:0] rsvd;
    logic [7:0]  dst;
    logic [7:0]  src;
    logic [15:0] len;
  } pkt_meta_t;

  // AXI response codes
  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } axi_resp_e;

  // One-hot port code of stream port idx in a set of nports ports where the
  // last one is the DMA stream and the others are physical 10GbE ports.
  function automatic logic [7:0] port_code(int idx, int nports);
    logic [7:0] c;
    c = '0;
    if (idx == nports - 1) c[1] = 1'b1;
    else                   c[2*idx] = 1'b1;
    return c;
  endfunction

  // System address map (40-bit physical addresses).
  localparam int          SYS_ADDR_W   = 40;
  localparam int          NUM_SLAVES   = 7;
  localparam logic [39:0] DDR_BASE     = 40'h00_0000_0000;
  localparam logic [39:0] DDR_MASK     = 40'hFF_0000_0000;  // 4 GB window
  localparam logic [39:0] PERIPH_BASE  = 40'h10_0000_0000;
  localparam logic [39:0] PERIPH_MASK  = 40'hFF_FFFF_0000;  // 64 KB each
  // slave indices on the interconnect
  localparam int SLV_DDR     = 0;
  localparam int SLV_CONSOLE = 1;
  localparam int SLV_SPI     = 2;
  localparam int SLV_I2C     = 3;
  localparam int SLV_DEBUG   = 4;
  localparam int SLV_PAC     = 5;
  localparam int SLV_DMA     = 6;

  function automatic logic [39:0] slave_base(int s);
    return (s == SLV_DDR) ? DDR_BASE : PERIPH_BASE + 40'(s) * 40'h1_0000;
  endfunction

  function automatic logic [39:0] slave_mask(int s);
    return (s == SLV_DDR) ? DDR_MASK : PERIPH_MASK;
  endfunction

  // the whole default map, for the interconnect's parameters
  function automatic logic [NUM_SLAVES-1:0][SYS_ADDR_W-1:0] map_base();
    for (int s = 0; s < NUM_SLAVES; s++) map_base[s] = slave_base(s);
  endfunction

  function automatic logic [NUM_SLAVES-1:0][SYS_ADDR_W-1:0] map_mask();
    for (int s = 0; s < NUM_SLAVES; s++) map_mask[s] = slave_mask(s);
  endfunction

endpackage
