# Wing-LDA: data concentrator for the AHCAL readout

The Wing-LDA (Link Data Aggregator) sits between up to 96 detector
interface boards (DIFs) of a calorimeter and a processor that writes the data to disk. Each
DIF reads out the SPIROC front-end ASICs of one detector slab and sends the data
to the LDA over a slow serial line. The LDA has to:

* collect the readout of all 96 DIFs at the same time. A DIF sends up to
  180 kB per readout cycle, cut into fragments of at most 100 bytes, and
  fragments of different ASICs may interleave;
* put the fragments back together into one packet per ASIC (up to 2.4 kB);
* move the packets over fast chip-to-chip links into one buffer that a DMA
  engine empties into processor memory;
* send the clock-and-control card's (CCC) fast commands to every DIF with the
  same fixed delay. The commands are start acquisition, stop acquisition and
  synchronise;
* raise a busy signal to the CCC while any connected DIF is busy, or while the
  buffer lacks room for another readout cycle.

The hardware has five FPGAs. Each of four Kintex-7 "slave" FPGAs serves 24 DIF
ports. One Zynq holds the central buffer, the DMA and the CPU, and talks to each slave over one
dual-lane link. This repository holds synthesizable SystemVerilog for all the FPGA
logic of that data path. The top module is `wing_lda`. The DMA
engine, the CPU with its Linux/TCP stack, the DDR memory and the FPGA I/O
delay primitives are not included. Their signals are ports of the top.

## Clocks and rates

| clock | frequency | used by |
|---|---|---|
| `clk_ser` | 200 MHz | link serialisers (two bits per cycle per lane, DDR) |
| `clk_sys` | 40 MHz = `clk_ser`/5 (`clk_div5`) | everything else |

* DIF serial line: a 10 MHz bit clock, 4 clocks of `clk_sys` per bit. The frame has a start bit,
  8 data bits LSB first and a stop bit of half length. That makes 38 clocks per byte,
  8.42 Mbit/s.
* Slave link: each of 2 lanes carries one 8b/10b symbol per `clk_sys` cycle at 400 Mbit/s. That gives 16 bits
  per clock, 80 MB/s of payload per slave.
* Inside a slave, the memory manager moves 64 bits per clock (320 MB/s).
* The central FIFO has 32768 words of 64 bits (256 KiB) and the same 320 MB/s port.

The Zynq makes `clk_ser` and forwards it to the slaves. Each FPGA divides it
by five on its own. `rst` is synchronous and must last at least 10
`clk_ser` cycles.

## Upstream path: DIF to memory

### DIF port (`dif_port` = `uart_rx` + `dif_rx` + `dif_tx`)

`uart_rx` delivers bytes to `dif_rx`. `dif_rx` parses the fragment format

```
type (0xF0 more follow | 0xF1 last fragment | 0xFE end of transfer), ASIC, length (<=100), payload
```

The port memory holds `SLOTS`=4 slots of 512 x 64 bit (4 KiB each) and is written one
byte per clock through byte enables. The first fragment of an ASIC takes a free
slot. Later fragments of that ASIC append to the same slot, so interleaved ASICs are
fine. The last fragment closes the slot and queues a header {slot, ASIC,
byte length} for the memory manager. An end-of-transfer fragment queues a header
with the `eot` flag set. A fragment that finds no free slot, or is longer than 100
bytes, is dropped and pulses `overflow`. The DIF's busy input is
synchronised and masked with the port's `enable`, so an unplugged port never
blocks the system.

### Memory manager (`mem_manager`)

The memory manager serves the header queues of its 24 ports round robin. For each packet
it sends one 64-bit header word and then the slot's words, one per clock:

| bits | 63:56 | 55:48 | 47:40 | 39:32 | 31:16 | 15:0 |
|---|---|---|---|---|---|---|
| field | 0xA5 | global port | ASIC | type (0 ASIC, 1 end of transfer) | byte length | running count |

Reads are issued one word ahead, so back-pressure never loses a word. Bytes past
the length are zero. After the last word the slot goes back to the
port. The global port number is `port_base` + local port. `port_base` is a constant input
(strap pins on the board), so all four slaves are the same netlist.

`axis_downsize` then cuts each 64-bit word into four 16-bit link words, low part
first.

### Zynq merge (`axis_upsize`, `axis_join`, `axis_fifo`)

On the Zynq each link's 16-bit output is packed back into 64-bit words. The
four streams are then merged round robin, one whole packet at a time. The result is written into
the 256 KiB FIFO, which feeds the DMA's S2MM port (`s2mm_*`). The DMA
sees exactly the packets the memory managers produced.

## The slave link (`fpga_link`)

This is the most involved part. Each end of a link is the same `fpga_link`:
`link_tx`, then two `enc_8b10b` + `link_ser` lanes; two `link_deser` +
`dec_8b10b` lanes, then `link_rx`.

**Symbols.** Every `clk_sys` cycle carries one {K, byte} slot on each lane, with lane 0 as the low
byte.

| slot | lane 0 | lane 1 |
|---|---|---|
| idle | K28.5 | K28.5 |
| start of packet | K27.7 | sequence number |
| data / CRC | low byte | high byte |
| end of packet | K29.7 | sequence number |
| ACK / NAK | K28.0 / K28.2 | sequence number |
| status | K28.3 | {busy, receive buffer full} |
| fast command | K28.6 | command code |

**Priority.** Each slot is filled in this order: fast command, ACK, NAK, status, the
packet being sent, idle. A fast command therefore always leaves in the next
slot, and its delay through the link is constant: 4 `clk_sys` cycles from the
input of one end to the output of the other. Control slots may fall between any two data
words of a packet. The receiver strips them out.

**Reliability.** `link_tx` stores up to 8 packets of up to 2048 words in a
circular buffer. It sends the oldest packet, followed by a CRC-16 (polynomial 0x1021, start value 0xFFFF), and
waits for the answer. ACK frees the packet. A NAK, or no answer within 1024
clocks, sends it again, up to 3 times; after that the packet is dropped and
`tx_fail` pulses. `link_rx` writes a packet into its 8192-word buffer
provisionally. It commits the packet only if the CRC gives zero and no symbol error was seen;
otherwise it rolls the packet back and answers NAK. A packet with the sequence number of the
last accepted one is a retransmission whose ACK was lost. It is acknowledged
again and dropped. When less than one packet of room is left, `link_rx`
reports "full" in its status word, and the far `link_tx` starts no new
packet. A status word goes out on every change and every 256 clocks.

**Serial layer.** `link_ser` loads a 10-bit symbol at phase 0 of the five
`clk_ser` cycles and shifts out two bits per cycle, bit 9 first. `link_deser` keeps
the last 20 bits. Once per symbol it searches all 10 bit offsets for a K28.5
comma and locks onto the one it finds. This stands in for the IDELAY/bit-slip
alignment of the real FPGAs. A lane that is not locked, or whose decoder reports a code or
disparity error, marks the symbol as bad.

Slaves send ASIC packets upstream. Slaves report their busy state (the OR of their enabled
DIFs) in status words. The Zynq sends downstream packets and fast commands.

## Fast commands and busy (`ccc_ctrl`, `bcast`)

The CCC sends one byte per command over a serial line:
`0x01` start, `0x02` stop, `0x03` synchronise. `ccc_ctrl` hands a known code to
the links of all enabled slaves in the same clock. Unknown codes are counted and dropped. In each slave,
`bcast` passes the code to all enabled DIF ports in one clock. `dif_tx` sends it as
a 9-bit control frame ahead of any queued data. It waits only for the frame in progress, so
the DIFs see the command within one frame time (39 clocks) of each other.

`ccc_busy` is set in two cases. The first is a busy from an enabled slave, which is the OR of its
connected DIFs. The second is when the central FIFO holds more than 32768 - 22500 words. That
keeps 180 kB free, the largest chunk one DIF sends per readout cycle, before
the next acquisition may start.

## Downstream path: processor to DIF

The DMA's MM2S port sends 32-bit packets (`mm2s_*`). Word 0 holds the
destination's global port in bits 7:0. `tx_distrib` sends the whole packet to
slave port/24 through a 32-to-16 `axis_downsize`. Destinations beyond the last
slave are dropped. In the slave, `axis_upsize` rebuilds 32-bit words.
`mem_manager` strips the header and passes the payload to the port's `dif_tx`
as 16-bit words, low half first. `dif_tx` sends each word as two
9-bit frames with bit 8 = 0, and then a control frame `0xFF` that marks the end of the packet.

## Departures from the original system, and limits

* The DIF fragment format, the header words, the link symbols, the stop-and-wait
  retransmission scheme, the downstream framing and the fast-command codes are
  all this design's own. The published description gives the function and
  the sizes (100-byte fragments, 8-packet link buffer, 3 retries, CRC-16, 8b/10b,
  256 KiB buffer) but not these formats.
* A link packet holds at most 2048 words (4096 bytes) including the 8-byte
  header. An ASIC packet longer than 4088 bytes would be cut short. Real
  SPIROC packets are at most 2.4 kB.
* Input-delay calibration and clock alignment are replaced by the comma
  search in `link_deser`.
* Not built: the AXI DMA, the ARM CPU with Linux and the TCP server, DDR
  memory, GbE, and the DIF, CCC and SPIROC themselves (the testbenches model
  the DIF, CCC and DMA).

## Testbenches

Each testbench in `tb/` prints `TB_RESULT checks=N failures=M` and has a
watchdog.

| testbench | covers |
|---|---|
| `tb_uart_tx`, `tb_uart_rx` | framing, 38-clock byte period, back-to-back frames |
| `tb_dif_rx` | interleaved fragments, slot reuse, overflow, end of transfer |
| `tb_mem_manager` | round robin, header words, zero masking, stalls, downstream routing |
| `tb_crc16`, `tb_enc_8b10b`, `tb_dec_8b10b` | against reference models and all code words |
| `tb_clk_div5`, `tb_link_ser`, `tb_link_deser` | phase, bit order, alignment at every offset |
| `tb_axis_*` | width conversion, padding, packet-atomic merge, FIFO full/empty and count |
| `tb_fpga_link` | two link ends: random traffic both ways, bit errors, NAK and retransmission, give-up after 3 retries, constant fast-command delay, busy status, throughput (0.99 word per clock) |
| `tb_wing_lda` | whole system at 2 slaves x 3 ports |
| `tb_wing_lda_full` | the same at full size (4 x 24 ports), default parameters |

The end-to-end tests drive DIF, CCC and DMA models. They check every ASIC packet word
for word at the DMA and every downstream packet byte for byte at its DIF. They count these
mechanisms and fail if any never happened:

* link lock;
* START, SYNC and STOP reaching exactly the enabled DIFs within one frame time;
* DIF busy reaching the CCC, while a disabled port's busy is ignored;
* slot overflow;
* DMA stalls;
* retransmission after a forced bit error in each link direction;
* end-of-transfer markers;
* downstream routing and the drop of a packet for a port that does not exist;
* busy from low FIFO space.

The `tb_wing_lda` and `tb_fpga_link` tests also cover `dif_tx`, `dif_port`, `bcast`,
`tx_distrib`, `ccc_ctrl`, `kintex_lda`, `zynq_lda`, `link_tx` and `link_rx`, which
have no testbench of their own.

To simulate with Verilator:

```
verilator --binary --timing -Wno-fatal --timescale 1ns/1ps --top-module tb_wing_lda \
    -y rtl -y tb +libext+.sv -Irtl rtl/lda_pkg.sv tb/tb_wing_lda.sv
./obj_dir/Vtb_wing_lda
```

`tb_wing_lda` runs about 22 ms of simulated time, which takes roughly 15 s. `tb_wing_lda_full` runs about 9 ms, which takes roughly 30 s.
