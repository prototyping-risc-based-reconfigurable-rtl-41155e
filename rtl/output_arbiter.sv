// output_arbiter: the OAR. Sends each packet from the PAC Tx-FIFO to the
// output ports named in its metadata.
//
// Outputs 0..NUM_OUT-2 are the transmit sides of the 10GbE ports (one-hot
// destination bit 2*i), output NUM_OUT-1 is the DMA (host) stream
// (destination bit 1). The destination set is read from tuser[31:24] of a
// packet's first beat and held to its tlast. Each beat is offered to every
// selected output; an output that takes it is marked done, and the input
// beat is consumed once all selected outputs have it, so several bits send
// the same packet to several ports and a slow port only delays that
// packet. A packet with no known destination bit is consumed and dropped.
// Data, keep, user and last are wired to every output unchanged (they are
// meaningful only where tvalid is high); only valid and ready are switched,
// so the output data bits show up as straight wires from the input. The
// arbiter adds no latency.
// The tuser layout and the multicast/drop behaviour are this design's
// choices; the architecture only names the module and its ports.
module output_arbiter
  import netsoc_pkg::*;
#(
  parameter int NUM_OUT = 5,
  parameter int DATA_W  = STREAM_DATA_W,
  parameter int USER_W  = STREAM_USER_W,
  localparam int KEEP_W = DATA_W / 8
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [DATA_W-1:0]              s_tdata,
  input  logic [KEEP_W-1:0]              s_tkeep,
  input  logic [USER_W-1:0]              s_tuser,
  input  logic                           s_tlast,
  input  logic                           s_tvalid,
  output logic                           s_tready,
  output logic [NUM_OUT-1:0][DATA_W-1:0] m_tdata,
  output logic [NUM_OUT-1:0][KEEP_W-1:0] m_tkeep,
  output logic [NUM_OUT-1:0][USER_W-1:0] m_tuser,
  output logic [NUM_OUT-1:0]             m_tlast,
  output logic [NUM_OUT-1:0]             m_tvalid,
  input  logic [NUM_OUT-1:0]             m_tready
);

  logic               in_pkt;
  logic [NUM_OUT-1:0] held_sel, first_sel, sel, done;

  always_comb begin
    for (int i = 0; i < NUM_OUT; i++)
      first_sel[i] = |(port_code(i, NUM_OUT) & s_tuser[31:24]);
  end

  assign sel = in_pkt ? held_sel : first_sel;

  always_comb begin
    for (int i = 0; i < NUM_OUT; i++) begin
      m_tdata[i]  = s_tdata;
      m_tkeep[i]  = s_tkeep;
      m_tuser[i]  = s_tuser;
      m_tlast[i]  = s_tlast;
      m_tvalid[i] = s_tvalid && sel[i] && !done[i];
    end
  end

  assign s_tready = &(~sel | done | m_tready);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_pkt   <= 1'b0;
      held_sel <= '0;
      done     <= '0;
    end else if (s_tvalid) begin
      if (s_tready) begin
        done   <= '0;
        in_pkt <= !s_tlast;
        if (!in_pkt) held_sel <= first_sel;
      end else begin
        done <= done | (m_tvalid & m_tready);
        if (!in_pkt) begin
          // keep the destination of a beat waiting for a slow output
          in_pkt   <= 1'b1;
          held_sel <= first_sel;
        end
      end
    end
  end

endmodule
