# NetSoC: a network interface whose packet processing runs on an open RISC core

NetSoC is a system-on-chip for FPGA prototyping of networked systems in which
the packet processing is done by an open-source processor, not by fixed
hardware. Four 10 Gigabit Ethernet ports and a host DMA stream feed one packet
buffer. A 64-bit RISC core reads each packet out of that buffer, handles it in
its operating system's network stack, and writes replies into a second buffer.
Hardware then sends each reply to the port named in its header. Because the
processor is open, a researcher can change both the network path and the CPU
itself. The price is throughput: with register-by-register packet I/O, the
reference system reaches only single-digit Mbit/s.

This repository holds synthesizable SystemVerilog for everything around the
processor:
- the network data plane: port adapters, input arbiter, packet controller and
  output arbiter;
- the AXI control plane: interconnect and width adapters;
- the small peripherals the operating system needs: console, serial debugger,
  SPI and I2C.

The processor, the DDR3 controller, the PCIe/DMA engine and the Ethernet
MAC/PHY cores are existing IP blocks. They are not included. Their
interfaces are ports of the top module, `netsoc_top`.

## The system at a glance

```
            CPU (AXI master, 256b)          host via PCIe/DMA (AXI master, 32b)
                       \                       /
                  axil_interconnect (shared bus, 256b, 2 masters x 7 slaves)
   |        |         |        |         |            |               |
  DDR3    console    SPI      I2C     serial       packet          DMA engine
  (256b)   (32b)    (32b)    (32b)    debugger     controller      registers
                                       (32b)        (64b)            (32b)
                                                 Rx-FIFO  Tx-FIFO
  10GbE port 0..3 ---> input_arbiter --->  ^        |  ---> output_arbiter ---> 10GbE port 0..3
  DMA stream in   --->      (RR)                                (by dest)  ---> DMA stream out
```

- `cpu_int0` is the console interrupt.
- `cpu_int1` is the packet interrupt.
- Everything runs on one clock, `clk`. Reset is active-low and synchronous (`rst_n`).

## Packet metadata

Every packet in the data plane is an AXI-Stream of 64-bit beats, with `tkeep`
(8 bits), `tlast` and a 128-bit `tuser`. The first beat's `tuser` carries the
packet's metadata. This is the NetFPGA convention.

| tuser bits | meaning |
|---|---|
| [15:0] | packet length in bytes |
| [23:16] | source port, one-hot port code |
| [31:24] | destination port(s), one-hot port code; several bits set = multicast |

Port codes put physical port *i* on bit 2*i* (0x01, 0x04, 0x10, 0x40) and the
DMA stream on bit 1 (0x02). The function `port_code()` in `netsoc_pkg` encodes
this.

The reference design puts metadata on packets in the port module. It does not
print the bit layout, so the NetFPGA layout above is an outside convention.

## Receive path

1. **`eth10g_port`** takes the MAC's receive stream and stores the packet in
   its own store-and-forward FIFO (`axis_pkt_fifo`). It counts the bytes as
   they arrive. Only when `tlast` is stored does it release the packet, with
   the length and its own source code in `tuser`. That is why the length can
   ride on the first beat.
   - Unlike a real MAC stream, this one has `tready`. A full FIFO
     back-pressures the MAC rather than dropping frames.
   - The transmit direction of the port is a plain pass-through. The
     metadata is not sent on the wire.
2. **`input_arbiter`** merges the four port streams and the host DMA stream
   (input 4).
   - It picks round-robin, starting after the last input granted.
   - It holds the grant from a packet's first beat to its `tlast`, so packets
     are never interleaved.
   - The chosen beat passes straight through with no register. A new packet
     can start in the cycle after a `tlast`.
3. **`packet_controller`** holds an Rx-FIFO and a Tx-FIFO (both
   `axis_pkt_fifo`) and the register block `pac_txrx_ctrl`. `cpu_int1` is high
   while at least one complete packet waits and the interrupt is enabled.

## Programmed I/O: how software moves a packet

There is no DMA into processor memory. The CPU moves every packet 64 bits at a
time through the registers below. They are 64-bit, at the packet controller's
base address, `0x10_0005_0000`.

| offset | name | access | content |
|---|---|---|---|
| 0x00 | TX_META | W | metadata for the next transmitted packet (layout as `tuser[63:0]`) |
| 0x08 | TX_CTRL | W | [7:0] byte strobe of the next TX_DATA word, [8] it is the last word |
| 0x10 | TX_DATA | W | pushes one 64-bit word into the Tx-FIFO; the write is held off while the FIFO is full |
| 0x20 | RX_META | R | metadata of the packet at the head of the Rx-FIFO |
| 0x28 | RX_CTRL | R | [9] a word is available, [8] it is the last word, [7:0] its byte strobe |
| 0x30 | RX_DATA | R | the head word; reading it removes it |
| 0x38 | STATUS | R/W | [0] packet waiting, [1] Tx-FIFO has room, [2] interrupt enable (R/W), [15:8] packets waiting |

**Receiving.** After `cpu_int1`, the driver does the following:
1. Read RX_META for the length and source.
2. Repeat for each word: read RX_CTRL, then RX_DATA. Stop after the word whose
   RX_CTRL showed "last".

The interrupt stays high while more packets wait, so one interrupt can serve a
batch.

**Transmitting.** The driver does the following:
1. Write TX_META with the destination code in bits [31:24] and the length in [15:0].
2. Write each word to TX_DATA.
3. Before the last word, write TX_CTRL with that word's strobe and bit 8.

TX_CTRL returns to "full strobe, not last" after the last word. So a driver
writes it once per packet.

**Output.** The packet goes into the Tx-FIFO. It leaves only when it is
complete, through **`output_arbiter`**:
- The arbiter reads the destination bits of the first beat and sends the
  packet to every output named there.
- With several destinations (multicast), each beat advances only when all of
  them are ready.
- A packet naming no existing output is drained and dropped.

The write order (metadata, then strobe, then data) comes from the reference
driver. The reference driver used 32-bit words; here they are 64-bit, matching
the controller's 64-bit bus port.

## Control plane

`axil_interconnect` is a shared-bus AXI4-Lite crossbar:
- It takes one transaction at a time.
- It alternates round-robin between the two masters.
- A transaction passes through the states *decode, issue, wait, respond*.
- An address that matches no slave is answered with DECERR and reaches no
  slave.

The slave map is a parameter. Its default comes from `netsoc_pkg`:

| slave | base | size |
|---|---|---|
| DDR3 | 0x00_0000_0000 | 4 GB |
| console | 0x10_0001_0000 | 64 KB |
| SPI | 0x10_0002_0000 | 64 KB |
| I2C | 0x10_0003_0000 | 64 KB |
| serial debugger | 0x10_0004_0000 | 64 KB |
| packet controller | 0x10_0005_0000 | 64 KB |
| DMA engine registers | 0x10_0006_0000 | 64 KB |

The bus is 256 bits wide, the BERI processor's width. Narrow ports connect
through `axil_width_conv`.

**Widening** (the 32-bit DMA master onto the 256-bit bus):
- Write data is copied into all eight lanes.
- The strobe goes only into the lane the address selects (`addr[4:2]`).
- Read data is taken from that lane.

**Narrowing** (the bus onto a 32-bit peripheral or the 64-bit packet controller):
- The lane selected by the address is passed down.
- Read data is copied into every lane.
- A write whose strobe touches bytes outside that lane is refused with SLVERR
  and not performed.

So a CPU must access a narrow peripheral with accesses of at most the
peripheral's width, aligned to it.

The interconnect adds three cycles plus the slave's latency, and each adapter
adds two. A CPU read of a peripheral register takes roughly ten clocks end to
end. Width conversion on the 256-bit side and SLVERR on a bad narrow write are
exercised by the system testbench.

## Peripherals

- **Console** (`console_uart`) is a character device. The operating system
  sees a JTAG-UART-style register pair:
  - DATA at 0x0: [7:0] character, [15] valid, [31:16] characters left.
  - CONTROL at 0x4: [0] read-interrupt enable, [1] write-interrupt enable,
    [8]/[9] pending, [31:16] free space.

  The host reaches the other end of the same two FIFOs, over PCIe:
  - HDATA at 0x8.
  - HSTATUS at 0xC: [15:0] characters for the host, [31:16] room towards the
    CPU.

  `cpu_int0` is (input waiting AND RE) OR (output FIFO at most half full AND
  WE). Each FIFO holds 64 characters. A character written to a full FIFO is
  dropped.
- **Serial debugger** (`serial_debugger`) gives the host a byte pipe to the
  processor's debug unit. The debug unit is used to load and start the kernel.
  - Writing 0x0 sends a byte.
  - Reading 0x4 returns [8] valid, [7:0] byte, and consumes it.
  - 0x8 shows both FIFO levels.

  The debug unit's own protocol is the processor's and is not modelled here.
- **SPI** (`spi_ctrl`) is the SD-card path of the RISC-V build. It runs in
  mode 0, MSB first, one byte per transfer.
  - DATA (0x0): a write starts a transfer and is held off while one is in
    progress; a read returns the received byte.
  - STATUS (0x4): [0] busy.
  - CS (0x8): the chip-select level; it resets high.
  - DIV (0xC): the half-period of SCLK in clocks; it resets to 4.

  A byte takes 16 x DIV clocks.
- **I2C** (`i2c_ctrl`) is a byte-level master for on-board devices. One
  command word at 0x0 can do START, write the byte, read a byte with ACK or
  NACK, and STOP. STATUS is at 0x4: [0] busy, [1] the last written byte was
  not acknowledged, [15:8] the byte read. DIV is at 0x8: a quarter SCL period
  in clocks, reset value 8. Both pins are open-drain enables. There is no
  clock stretching, so SCL is never read back.

  The reference architecture only names this block. Its interface is the simplest one that
  drives an I2C bus.

## Sizes

| parameter | default | meaning |
|---|---|---|
| `NUM_PORTS` | 4 | 10GbE ports; the arbiters get NUM_PORTS+1 streams |
| `DATA_W` | 256 | interconnect data width (128 for a RISC-V build) |
| `FIFO_DEPTH` | 512 | beats (4 KB) per packet FIFO; each also holds at most 32 packets |
| console and debugger FIFOs | 64 | bytes each way |

A packet must fit its FIFO. A standard 1514-byte Ethernet frame is 190 beats.
A frame longer than 512 beats would deadlock the store-and-forward FIFO.

At the defaults, yosys maps the top to about 1.6 thousand cells, 3.9 thousand
flip-flops and 248 Kbit of memory.

## Departures from the reference system and open points

- **No processor, DDR3 controller, DMA/PCIe engine or MAC/PHY.** They are
  third-party IP and are represented by ports. Multi-core variants (four BERI
  or eight RISC-V cores) would need NUM_M = 5 or 9 interconnect masters. The
  interconnect takes that as a parameter, but the top has one CPU port.
- **AXI4-Lite only.** The interconnect has no bursts, no IDs and no
  concurrent transactions. A processor's cache-line refills would need AXI4
  bursts. With this interconnect, each line costs one transaction per
  256-bit word.
- **One clock.** The MAC clock domain (156.25 MHz) and the clock crossings
  into the processor's domain are not modelled.
- **Back-pressure instead of drops** on the receive side of each port.
- The register maps, the address map, the FIFO sizes and the metadata bit
  layout are choices of this design. The block structure, the bus widths
  (256/64/32 bits), the interrupt wiring (console to Int0, packet controller
  to Int1) and the round-robin input arbitration follow the reference
  architecture.

## Verifying and simulating

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`, stops itself with a watchdog, and compares
against values computed in the testbench.

| testbench | what it covers |
|---|---|
| `tb_axis_pkt_fifo` | store-and-forward release, lengths against an independent count, filling and stalling the writer, random gaps and stalls |
| `tb_input_arbiter` | round-robin order under contention, no interleaving, per-source order, random back-pressure |
| `tb_output_arbiter` | single, multiple and DMA destinations, drop when there is none, random per-output back-pressure |
| `tb_eth10g_port` | length and source code on received packets, data unchanged both ways |
| `tb_packet_controller` | the driver's register sequence both ways, strobes, release only after the last word, interrupt enable, status |
| `tb_axil_interconnect` | two masters at once against reference memories, decode windows, DECERR, round-robin service |
| `tb_console_uart` | both directions, space counts, both interrupt rules, overflow |
| `tb_serial_debugger` | both byte streams and the status counters |
| `tb_spi_ctrl` | MSB-first mode-0 transfers against a slave model, transfer time of 16 x DIV clocks |
| `tb_i2c_ctrl` | START, write, repeated START, read, STOP against a slave model, ACK and NACK |
| `tb_netsoc_top` | the whole system at default parameters, described below |

`tb_netsoc_top` plays the processor on the CPU master, the host on the DMA
master and streams, and a DDR3 memory (`tb/ddr_axil_model.sv`, random
latency). It runs this sequence:
1. The host loads an image into DDR3 with 32-bit writes, and the CPU reads it
   back with 256-bit reads.
2. The host exchanges bytes with the debug unit.
3. The CPU prints a banner that the host reads while both masters are busy.
4. Packets arrive on all four ports and from the host at once. Port 0 sends
   80 short packets, enough to fill its FIFO and the Rx-FIFO. The CPU reads
   every packet by PIO after the interrupt and echoes it to its source port.
   The host's packet is echoed to port 0 and the host together (multicast).
   The outputs apply random back-pressure.
5. It finishes with an SPI loopback byte, an I2C address with no device
   (NACK), an unmapped address (DECERR) and a key typed by the host (console
   interrupt).

The testbench counts each mechanism and fails if any count stays zero:
- arbiter contention;
- receive back-pressure;
- output back-pressure;
- both interrupts;
- concurrent masters;
- DECERR;
- multicast;
- widening and narrowing.

It runs in well under a second of simulator time.

To run a testbench with plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -y rtl -y tb +libext+.sv \
  rtl/netsoc_pkg.sv tb/tb_netsoc_top.sv --top-module tb_netsoc_top -o sim
./obj_dir/sim
```

Replace `tb_netsoc_top` with any other testbench name. The package must come
first on the command line. The other files are found by module name, one
module per file. The testbenches drive on the falling edge and sample just
after it, so they do not depend on scheduling order at the rising edge.

## What the reference evaluations would need from this RTL

**Ping latency at 60 to 120 MHz.** An echo frame of 98 bytes is 13 beats, far
inside the FIFOs. The hardware adds a store-and-forward delay of one packet
length in each FIFO; the arbiters add no cycles. The measured latency is
dominated by the processor and its driver.

**iperf at 6.9 Mbit/s.** This is about 0.06 bit per clock at 120 MHz. The PIO
path here moves one 64-bit word per two register reads of about ten clocks
each. That is roughly 3 bit per clock, so the register path is not what limits
that figure.

**The 32 MB kernel of the boot simulation.** It fits the 4 GB DDR3 window.
Booting it needs the processor and memory controller, which are outside this
RTL.
