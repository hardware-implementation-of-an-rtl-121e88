# An OPC UA server in hardware: RTL of the field-device SoC

OPC UA is the semantic communication standard of industrial automation. A
software OPC UA server needs an application processor, hundreds of kilobytes
of RAM and an operating system, which is too much for a small sensor or
actuator. This design moves the server into a dedicated engine on a
low-power microcontroller chip. The CPU only copies OPC UA messages between
the network and the engine. The engine does the protocol work:

- the connection handshake;
- secure-channel bookkeeping for up to three parallel sessions;
- splitting and merging message chunks;
- read and write requests on the device's information model (the
  "namespace").

The namespace lives in a dedicated SRAM bank of the chip. The engine reaches
it through its own bus master, which has priority on that bank.

The RTL here covers the memory system and bus fabric of the chip, the
peripheral bus with timer, GPIO and interrupt controller, and the OPC UA
engine apart from its programmable service processor. Every block has a
self-checking testbench, and the top level has an end-to-end test that runs a
complete OPC UA session at the chip's real sizes.

## Chip organisation

```
              CPU I   CPU D   DMA RX  DMA TX  OPC UA  SPI slave      (6 masters)
                |       |       |       |       |       |
             +--------------- mem_interconnect -------------------+
             | per-bank priority master, round-robin for the rest |
             +--+-------+-------+-------+-------+-------+---------+
                |       |       |       |       |       |
              SRAM0   SRAM1   SRAM2   SRAM3   SRAM4   apb_bridge
              256K    256K    96K     96K     64K       |
              instr.  data    ETH TX  ETH RX  namespace |  APB
                                     +------+------+----+----+------+------+------+------+
                                   OPC UA  timer  GPIO  IRQ  UART1  UART2  SPI    I2C
                                   engine                ctrl               master master
```

| Address               | Slave                               | Priority master        |
|-----------------------|-------------------------------------|------------------------|
| 0x0000_0000           | SRAM0, instructions, 256 KiB        | CPU instruction port   |
| 0x0010_0000           | SRAM1, data, 256 KiB                | CPU data port          |
| 0x0020_0000           | SRAM2, Ethernet TX, 96 KiB          | Ethernet TX DMA        |
| 0x0030_0000           | SRAM3, Ethernet RX, 96 KiB          | Ethernet RX DMA        |
| 0x0040_0000           | SRAM4, OPC UA namespace, 64 KiB     | OPC UA engine          |
| 0x1000_0000 + k*4 KiB | APB peripheral k                    | none (round-robin)     |
| anything else         | default slave, reads 0xDEC0_DE00    | -                      |

The APB peripherals are: k = 0 OPC UA engine, 1 timer, 2 GPIO, 3 interrupt
controller, 4 UART1, 5 UART2, 6 SPI master, 7 I2C master.

Interrupt controller sources are 0 for OPC UA reply waiting, 1 for the
timer, 2 for GPIO, 3 for UART1, 4 for UART2 and 5 for the SPI master.
The I2C master has no interrupt; software polls its STATUS register.

The bank sizes and the priority rule come from the chip description. Three
things are this design's own choices: the addresses, the peripheral order
and which of the two CPU ports (and which of the two DMA ports) has priority.
The last of these follows the bank names: instructions for the instruction
port, TX for the TX DMA, and so on.

### The main bus

The chip uses AXI. This RTL uses a simpler bus with the same roles:

- **Request** (`mem_req_t`): a single-beat transfer with `valid`, `we`,
  `addr`, `wdata` and `wstrb`. The slave accepts it with `ready` in the same
  cycle.
- **Response** (`mem_rsp_t`): `rvalid` with `rdata`, at least one cycle
  after acceptance. Writes also get a response.
- **Outstanding transfers:** each master may have one transfer outstanding.

`semantic_pkg` holds these structs, the APB structs, the address map and the
OPC UA constants.

### Interconnect (`mem_interconnect`)

Address decoding and arbitration are combinational. For each slave:

- If the bank's priority master requests, it wins.
- Otherwise a round-robin arbiter (`rr_arbiter`) chooses among the others.
- A slave has at most one transfer in flight. The next grant may happen in
  the cycle its response returns, so a 1-cycle SRAM sustains one transfer per
  cycle.
- The response is steered to the owning master by an owner register.

With a priority master requesting back-to-back, the other masters of that
bank wait. This starvation is the intended effect of "priority", and the
chip-level test observes it on SRAM4.

### APB bridge (`apb_bridge`)

The bridge converts one main-bus transfer into one AMBA 3 APB transfer: a
SETUP cycle, then ACCESS until PREADY. The main-bus response arrives in the
cycle after ACCESS ends, so an access without wait states costs 2 cycles
after acceptance. An index with no peripheral answers 0 without a bus
transfer.

### Boot SPI slave (`spi_slave`)

After power-up an external device loads the volatile main memory through
this SPI port. It is a master on the interconnect, so it can also set up any
peripheral register.

The protocol uses SPI mode 0, MSB first. CS_N frames each transaction.

| Command | Bytes on MOSI | Effect |
|---------|---------------|--------|
| write | `0x02`, 4 address bytes (MSB first), data bytes | each data byte is written to the next address |
| read | `0x03`, 4 address bytes, 1 dummy byte, then one clock byte per data byte | data bytes come back on MISO from consecutive addresses |

Each data byte is one main-bus transfer. A write uses a byte strobe. A read
fetches the word and returns the addressed byte. The dummy byte covers the
latency of the first read.

The pins are sampled by the system clock through two-flop synchronisers, so
SCK must be at most clk/8. A byte then lasts at least 64 clock cycles, which
is ample for a bus transfer under contention.

### Timer, GPIO, interrupt controller, UARTs, SPI and I2C masters

These blocks are small register blocks of this design's own.

- **Timer (`apb_timer`)** registers:
  - CTRL: enable and interrupt enable.
  - COUNT.
  - COMPARE: the counter restarts after COMPARE+1 cycles.
  - STATUS: flag, cleared by writing 1.
- **GPIO (`apb_gpio`)** registers:
  - OUT and OE.
  - IN: read through a two-flop synchroniser.
  - IRQ_MASK: the interrupt is the OR of the masked synchronised inputs.
- **Interrupt controller (`apb_irq_ctrl`)** registers:
  - PENDING: sticky, cleared by writing 1.
  - ENABLE.
  - ID: the lowest enabled pending source.
  - `cpu_irq` is high while any enabled source is pending.
- **UART (`apb_uart`, two instances)** uses 8N1 frames. Its bit time is DIV
  clock cycles, with reset value 16 and a minimum of 4. Registers:
  - DATA: write to send. The write stalls while a byte already waits to be
    sent. Read to get the received byte.
  - STATUS: transmitter busy, byte received, overrun, framing error. The two
    error bits clear by writing 1.
  - DIV.
  - CTRL: interrupt enables for byte received and transmitter idle.
  - The receiver finds the middle of the start bit and samples each bit
    there.
- **SPI master (`apb_spi_master`)** is byte-wide and uses mode 0, MSB first.
  Registers:
  - DATA: write to start a transfer (the write stalls while one runs); read
    to get the byte received.
  - STATUS: busy.
  - DIV: SCK half period in clock cycles.
  - CS: chip-select level, set by software so several bytes form one frame.
  - The interrupt is a one-cycle pulse when a transfer ends.
- **I2C master (`apb_i2c_master`)** runs one command per CMD write. The
  write stalls while a command runs. Registers:
  - CMD: the byte, plus bits for START (or repeated START) first, WRITE the
    byte, READ a byte, answer NACK instead of ACK after the read, and STOP
    last.
  - STATUS: busy, and whether the last written byte was not acknowledged.
  - RXDATA: the byte received by the last READ.
  - DIV: a quarter SCL period in clock cycles (reset 8).
  - SCL and SDA are open drain: the block only pulls a line low or releases
    it, and reads it back.
  - Each SCL period has four steps: change SDA, release SCL, sample SDA,
    pull SCL low. A slave that holds SCL low stretches the clock; the
    master waits for SCL to go high before it samples.

## The OPC UA engine (`opcua_engine`)

```
 APB -> opcua_regs -> request FIFO -> opcua_transport --+--> s3_stage 0 --+
                                          (HEL/ACK/ERR) +--> s3_stage 1 --+--> reply merge
 APB <- opcua_regs <- reply FIFO  <-----------------------------------------+
                                                    each s3_stage: opcua_llcp + message SRAM
                                                    + port for the stream processor
 namespace ports of the 3 stages -> round-robin -> one bus master -> SRAM4
```

### Programming model

The engine does not touch the network. The CPU writes each received OPC UA
binary message word by word (little-endian, padded to a word) into RXDATA. It
then pops reply words from TXDATA.

STATUS shows how many reply words wait. It also flags the last word of each
reply message, so the CPU can forward one reply message per packet.

| Offset | Name   | Access | Meaning |
|--------|--------|--------|---------|
| 0x00   | CTRL   | rw     | [0] enable (reset 1), [1] interrupt enable, [2] clear FIFOs (self-clearing) |
| 0x04   | STATUS | ro     | [15:0] reply words waiting, [16] request FIFO full, [17] head word is last of its reply, [23:20] stages holding a secure channel |
| 0x08   | RXDATA | wo     | push a request word; the APB transfer stalls (PREADY low) while the FIFO is full |
| 0x0C   | TXDATA | ro     | pop a reply word; 0 when empty |
| 0x10   | CHUNK  | ro     | chunk size negotiated by the last Hello |
| 0x14   | MSGCNT | ro     | reply messages popped so far |

The engine interrupt is high while reply words wait and CTRL[1] is set.

### Transport stage (`opcua_transport`)

The transport stage reads the 8-byte message header of every request. What
happens next depends on the message type:

- **HEL (Hello):** answered locally with an ACK (Acknowledge). The ACK's
  buffer sizes are limited by the client's. The server's receive size is
  limited by the client's send size, and the reverse. The chunk size used for
  replies becomes the client's receive buffer, capped at 8192.
- **OPN (OpenSecureChannel):** allocates the lowest free S3 stage. The
  transport stage writes the new channel id (stage number + 1) into the
  SecureChannelId field and forwards the chunk. With all stages busy the
  answer is ERR Bad_TcpServerTooBusy.
- **MSG:** routed by SecureChannelId. An unknown or unallocated channel
  gives ERR Bad_TcpSecureChannelUnknown.
- **CLO (CloseSecureChannel):** routed like MSG. Once the chunk is forwarded,
  the stage is freed.
- **Any other type:** ERR Bad_TcpMessageTypeInvalid.

A chunk larger than the 8192-byte receive buffer gives ERR
Bad_TcpMessageTooLarge. The rest of every rejected message is read and
dropped.

Replies from the transport stage itself and from the three S3 stages share
one output. A round-robin arbiter chooses the source at every message
boundary, so no stage waits for more than three others. This is the "fair
and deterministic" scheduling of the engine.

### S3 stage (`s3_stage`)

One S3 stage serves one secure channel. It contains:

- the low-level communication processor (LLCP);
- an 8 KiB single-port message buffer;
- a port to the high-level stream processor, which runs the OPC UA service
  programs.

The stage bus gives the LLCP priority. The stream processor is served in
every cycle the LLCP leaves free.

### Low-level communication processor (`opcua_llcp`)

This is the densest part of the design.

**Receive path.** The LLCP unpacks request words byte by byte into the
message buffer:

- The first chunk is stored whole, including its 24-byte header. The header
  is the 12-byte message header, the 4-byte token and the 8-byte sequence
  header.
- Later chunks only append their bodies. The buffer thus ends up holding one
  message with one header.
- A final chunk raises `rx_done` with the length.
- An abort chunk drops the message.
- A message that does not fit raises `rx_overflow`.
- After `rx_done` the stage takes no new chunk until its reply has gone out.

**Transmit path.** On `tx_start` the reply (`tx_len` bytes, starting with a
24-byte header written by the stream processor) is cut into chunks of at
most the negotiated size. Each chunk repeats the header with three fields
patched:

- the chunk type ('C' or 'F');
- its own MessageSize;
- a SequenceNumber increased by one per chunk.

OPN replies are never split. Their security header has variable length, and
the handshake reply is small.

`tx_len = 0` only releases the receive side. This is used for CLO, which has
no reply.

**Throughput.** Receiving takes 1 cycle per byte. Transmitting takes 2
cycles per byte, because the single-port SRAM has 1-cycle read latency.

### Namespace access

Each stage's stream processor has a namespace port. A round-robin arbiter
shares one bus master among the three ports, with one transfer in flight.
The master goes to SRAM4, where the bank gives the engine priority over the
CPU and the DMAs.

### What is not in the engine RTL

The high-level stream processor, its instruction ROM and the namespace
interface (which performs the node lookup) are not included. Their
instruction set, service programs and binary namespace format are not
published. Their connections are ports of `opcua_engine` and of the top
level, per stage:

| Port | Meaning |
|------|---------|
| `hl_req` / `hl_rsp` | message buffer bus |
| `ns_req` / `ns_rsp` | namespace bus, with full main-memory addresses |
| `rx_done`, `rx_len`, `rx_overflow` | request received |
| `tx_start`, `tx_len`, `tx_done` | reply handshake |

The testbenches attach `hlsp_model`, a behavioural stand-in. It reads the
request from the message buffer, serves a small request format on a flat
array in SRAM4, and writes the reply:

- op 1: read node;
- op 2: write node;
- op 3: read a range of nodes.

OPN is answered with a 16-byte body and CLO with no reply. This format
exercises the hardware paths. It is not OPC UA service encoding.

## Top level (`semantic_soc`)

The top level instantiates the interconnect, the five SRAM banks, the boot
SPI slave, the APB bridge, the OPC UA engine, the timer, GPIO, the interrupt
controller, two UARTs, the SPI master and the I2C master.
Signals of the parts that are not built are ports of the top:

- the CPU instruction and data buses;
- the CPU interrupt outputs (`cpu_irq`, `cpu_irq_id`);
- the two Ethernet DMA buses;
- the boot SPI pins (`spi_sck`, `spi_cs_n`, `spi_mosi`, `spi_miso`);
- the UART, SPI-master and I2C pins (`i2c_scl_oe`/`i2c_scl_i`, `i2c_sda_oe`/`i2c_sda_i`);
- the stream-processor ports of the three S3 stages;
- the GPIO pins.

The following parts of the chip are not built at all:

- the RISC-V core;
- the Ethernet MAC, IPv4/UDP block, DMA, SGMII and RMII;
- memory BIST;
- the analog parts: SerDes, ADPLL, body-bias generator, IO cells.

The chip's separate clocks (CPU 250 MHz, peripherals 100 MHz, OPC UA engine
50 MHz) are collapsed into one clock `clk` with an asynchronous active-low
reset `rst_n`.

Default parameters are the chip's sizes:

| Parameter | Value |
|-----------|-------|
| `SRAM0_BYTES`, `SRAM1_BYTES` | 256 KiB each |
| `SRAM2_BYTES`, `SRAM3_BYTES` | 96 KiB each |
| `SRAM4_BYTES` | 64 KiB |
| `NSTG` | 3 stages |
| `MSGBUF_BYTES` | 8 KiB per stage |
| `NGPIO` | 16 |

## Where this RTL departs from the chip

- AXI is replaced by the single-beat bus described above.
- There are no clock domain crossings. On the chip, namespace access latency
  includes synchronisation to the main-memory clock. Here it does not.
- The engine's register map, the request/reply word FIFOs and the
  channel-id assignment are this design's own.
- The split of the 24 KiB message buffer into three 8 KiB stages is assumed
  equal.
- The service programs are absent, so the end-to-end latency of a read or
  write node request cannot be compared with the chip. On the chip, a read
  takes about 33,000 cycles at 50 MHz, mostly in the service program.
- The engine serves one request per session at a time. Sessions run in
  parallel.

## Testbenches

All testbenches are self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it covers |
|-----------|----------------|
| `tb_sram_bank` | random byte-strobed writes and reads against a model |
| `tb_mem_interconnect` | routing, priority per bank, round-robin order, default slave |
| `tb_apb_bridge` | latency of 2 cycles plus wait states, PSEL/PENABLE phases, unmapped windows |
| `tb_apb_uart` | frames decoded by an independent serial model, exact bit time, receive, interrupt, overrun, framing error |
| `tb_apb_spi_master` | exchange with an SPI slave model in both directions, SCK half period, byte time, chip select, interrupt |
| `tb_apb_i2c_master` | writes and repeated-start reads against an I2C slave model with a register file, ACK/NACK, absent address, SCL period, START/STOP count |
| `tb_spi_slave` | SPI byte writes and reads at random addresses, neighbouring bytes untouched |
| `tb_apb_timer`, `tb_apb_gpio`, `tb_apb_irq_ctrl` | register behaviour, period, synchroniser delay, interrupt priority |
| `tb_opcua_regs` | register map, FIFO back-pressure |
| `tb_opcua_transport` | ACK contents, stage allocation, the four errors, routing, fair reply merge |
| `tb_opcua_llcp` | multi-chunk reception, abort, overflow, reply chunking against a reference chunker |
| `tb_s3_stage` | LLCP priority on the buffer bus, read-back, reply chunks |
| `tb_opcua_engine` | full OPC UA scenario through the APB slave with three stage models |
| `tb_semantic_soc` | the same scenario through the CPU data port at full chip size, with background traffic from the other masters and over the SPI pins |

The scenario in `tb_opcua_engine` and `tb_semantic_soc` covers:

- Hello;
- three secure channels, and a refused fourth;
- read and write node on each channel;
- a request sent in 100-byte chunks whose reply comes back in two chunks;
- three concurrent requests;
- an unknown channel;
- close and reopen.

`tb_semantic_soc` also triggers the remaining two transport errors, the
timer and GPIO interrupts, and the default slave. It counts each mechanism
and fails if any never occurred:

- each message type;
- each error;
- chunk merging and chunk splitting;
- namespace contention between stages;
- engine priority over a waiting DMA on SRAM4;
- APB wait states;
- the interrupts;
- memory access over the boot SPI slave;
- both UARTs and the SPI master in loopback;
- an I2C address byte on an empty bus, which must come back not acknowledged.

It runs in about ten seconds.

To simulate with Verilator:

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal -y rtl -y tb -Irtl -Itb \
    rtl/semantic_pkg.sv tb/tb_semantic_soc.sv --top-module tb_semantic_soc
./obj_dir/Vtb_semantic_soc
```

Replace the testbench name to run any other test. The helpers
`opcua_tb_helpers.svh` (message building and chunking), `opcua_scenario.svh`,
`apb_tb_tasks.svh` and `spi_tb_tasks.svh` are included by the testbenches that need them.

## Known lint warnings

Verilator's lint reports three kinds of warning. None of them points to a
logic problem.

- Unused signals and parameters. Examples are the `in_last` input of the
  LLCP, which the message length makes redundant, and package constants
  that a given module does not use.
- Output pins left open on purpose: the `grant` vector of the round-robin
  arbiters in the engine and the transport stage, and the LLCP's `tx_busy`.
- `rst_n` used both as an asynchronous reset and as a synchronous condition.
  The synchronous use is only in the protocol assertions of
  `mem_interconnect` and `spi_slave`, which are disabled during reset.
