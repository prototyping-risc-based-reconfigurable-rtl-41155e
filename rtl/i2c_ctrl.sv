// i2c_ctrl: I2C master for the board's configuration devices.
//
// Software issues byte-level commands; each command may begin with a
// (repeated) START, then write or read one byte, then end with a STOP.
// Every bit takes four quarter-periods of DIV system clocks: set SDA with
// SCL low, release SCL, sample SDA, pull SCL low. On a write the ninth bit
// samples the slave's ACK; on a read the master drives ACK (or NACK when
// asked) on the ninth bit. Pins are open drain: scl_oe/sda_oe = 1 pulls the
// line low, otherwise it is released; sda_i is the SDA line level.
// Clock stretching and arbitration are not supported.
// 32-bit AXI4-Lite slave, byte offsets:
//   0x0 CMD    W: [7:0] byte, [8] START, [9] STOP, [10] WRITE, [11] READ,
//              [12] NACK on read (the write waits while busy)
//   0x4 STATUS R: [0] busy, [1] last write got NACK, [15:8] byte read
//   0x8 DIV    RW: [15:0] quarter period in clocks (reset DEFAULT_DIV)
// Only the name of this controller and its use for on-board settings come
// from the architecture; the command interface is this design's choice.
module i2c_ctrl
  import netsoc_pkg::*;
#(
  parameter int ADDR_W      = 16,
  parameter int DEFAULT_DIV = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [ADDR_W-1:0] s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  output logic              scl_oe,
  output logic              sda_oe,
  input  logic              sda_i
);

  typedef enum logic [1:0] {IDLE, START, BITS, STOP} state_e;
  state_e state;

  logic [15:0] div, tick;
  logic [1:0]  ph;
  logic [3:0]  bitn;
  logic [7:0]  data, rx_byte;
  logic        do_stop, do_wr, do_rd, nack_rd, got_nack;

  wire busy = (state != IDLE);
  wire [1:0] waddr = s_axil_awaddr[3:2];
  wire [1:0] raddr = s_axil_araddr[3:2];
  wire wreq = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  wire wdo  = wreq && !(waddr == 2'd0 && busy);
  wire rdo  = s_axil_arvalid && !s_axil_rvalid;

  assign s_axil_awready = wdo;
  assign s_axil_wready  = wdo;
  assign s_axil_arready = rdo;
  assign s_axil_bresp   = RESP_OKAY;
  assign s_axil_rresp   = RESP_OKAY;

  wire step = busy && (tick == div - 16'd1);

  // state after the byte phase
  function automatic state_e after_bits(logic stop);
    return stop ? STOP : IDLE;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= IDLE;
      div           <= 16'(DEFAULT_DIV);
      tick          <= '0;
      ph            <= '0;
      bitn          <= '0;
      data          <= '0;
      rx_byte       <= '0;
      do_stop       <= 1'b0;
      do_wr         <= 1'b0;
      do_rd         <= 1'b0;
      nack_rd       <= 1'b0;
      got_nack      <= 1'b0;
      scl_oe        <= 1'b0;
      sda_oe        <= 1'b0;
      s_axil_bvalid <= 1'b0;
    end else begin
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      tick <= step || !busy ? 16'd0 : tick + 16'd1;
      if (wdo) begin
        s_axil_bvalid <= 1'b1;
        if (waddr == 2'd0) begin
          data    <= s_axil_wdata[7:0];
          do_stop <= s_axil_wdata[9];
          do_wr   <= s_axil_wdata[10];
          do_rd   <= s_axil_wdata[11] && !s_axil_wdata[10];
          nack_rd <= s_axil_wdata[12];
          ph      <= '0;
          bitn    <= '0;
          if (s_axil_wdata[8])                         state <= START;
          else if (s_axil_wdata[10] || s_axil_wdata[11]) state <= BITS;
          else if (s_axil_wdata[9])                    state <= STOP;
        end else if (waddr == 2'd2) begin
          div <= (s_axil_wdata[15:0] == '0) ? 16'd1 : s_axil_wdata[15:0];
        end
      end
      if (step) begin
        ph <= ph + 2'd1;
        unique case (state)
          START: unique case (ph)
            2'd0: sda_oe <= 1'b0;            // release SDA
            2'd1: scl_oe <= 1'b0;            // release SCL
            2'd2: sda_oe <= 1'b1;            // SDA falls while SCL high
            2'd3: begin
              scl_oe <= 1'b1;
              state  <= (do_wr || do_rd) ? BITS : after_bits(do_stop);
            end
          endcase
          BITS: unique case (ph)
            2'd0: begin
              if (bitn < 4'd8) sda_oe <= do_wr ? !data[7 - bitn[2:0]] : 1'b0;
              else             sda_oe <= do_rd ? !nack_rd : 1'b0;
            end
            2'd1: scl_oe <= 1'b0;
            2'd2: begin
              if (bitn < 4'd8) begin
                if (do_rd) rx_byte <= {rx_byte[6:0], sda_i};
              end else if (do_wr) begin
                got_nack <= sda_i;
              end
            end
            2'd3: begin
              scl_oe <= 1'b1;
              if (bitn == 4'd8) begin
                bitn  <= '0;
                state <= after_bits(do_stop);
              end else begin
                bitn <= bitn + 4'd1;
              end
            end
          endcase
          STOP: unique case (ph)
            2'd0: sda_oe <= 1'b1;            // SDA low with SCL low
            2'd1: scl_oe <= 1'b0;            // release SCL
            2'd2: sda_oe <= 1'b0;            // SDA rises while SCL high
            2'd3: state  <= IDLE;
          endcase
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (rdo) begin
        s_axil_rvalid <= 1'b1;
        unique case (raddr)
          2'd1: s_axil_rdata <= {16'd0, rx_byte, 6'd0, got_nack, busy};
          2'd2: s_axil_rdata <= {16'd0, div};
          default: s_axil_rdata <= '0;
        endcase
      end
    end
  end

endmodule
