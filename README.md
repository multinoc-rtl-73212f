# MultiNoC in SystemVerilog

MultiNoC is a small multiprocessor built around a network on chip. Two
16-bit R8 processors, each with its own 1K-word memory, a third 1K-word
memory and an RS-232 link to a host computer sit on the four routers of a
2x2 Hermes mesh. Nothing is shared by wires: every interaction between the
parts — a processor reading another processor's memory, a `printf` to the
host, the host loading a program, one processor waking another — is a
packet that travels through the mesh. The host loads programs and data over
the serial line, starts the processors, answers their input requests and
reads memory back when they are done.

This RTL gives the network, the serial bridge, the memories and the
control logic that turns a processor's loads and stores into packets. It
does not include the R8 core itself: its instruction set belongs to a
separate design, so each Processor IP exposes the core's memory bus as
ports, and the testbenches drive that bus with a bus-functional model.

```
              host (RS-232)
                 tx | ^ rx
        +----------v-+-----------------------------+
        | Serial IP  |                 | Proc. IP 2 |
        |   (00)     |--[R 00]--[R 10]--|  (10)     |
        |            |     |       |    |           |
        | Proc. IP 1 |--[R 01]--[R 11]--| Memory IP |
        |   (01)     |                  |   (11)    |
        +--------------------------------------------+
```

Router and IP addresses are 8-bit: X in the high nibble, Y in the low
nibble. X grows towards EAST, Y towards NORTH.

## Packets

A flit is 8 bits. Every packet starts with two header flits:

| flit | content |
|------|---------|
| 0 | target router address |
| 1 | payload length: the number of flits that follow (0..255) |
| 2 | source router address |
| 3 | command |
| 4.. | arguments; 16-bit values are sent high byte first |

The first two flits are all the routers look at. The layout from flit 2
onwards, and the numbers of the commands, are this implementation's own
choice:

| code | service | arguments | sent by |
|------|---------|-----------|---------|
| 00 | read from memory | count, addr hi, addr lo | serial, processor |
| 01 | read return | count words | memory |
| 02 | write in memory | count, addr hi, addr lo, count words | serial, processor |
| 03 | activate processor | – | serial |
| 04 | printf | word | processor |
| 05 | scanf | – | processor |
| 06 | scanf return | word | serial |
| 07 | notify | – | processor |
| 08 | wait | – | never sent (see below) |

Because the length field is one flit, one packet carries at most 125
words in a write and 126 in a read return.

## The Hermes network (`hermes_buffer`, `hermes_control`, `hermes_router`, `hermes_noc`)

### Link handshake

Every link, whether between routers or between a router and an IP, is a
pair of one-way channels. Each channel has a valid line (`tx` on the
sending side, `rx` on the receiving side), an 8-bit data bus and an
acknowledge line going back. The sender keeps the flit and its valid line
steady until it sees the acknowledge. The receiver stores the flit in a
clock where valid is high, its own acknowledge is low and it has room. It
then raises the acknowledge for exactly one clock, which it drives from a
register. The sender moves to the next flit on that acknowledge. A flit
therefore takes two clocks, so one port moves at most 4 bits per clock
(200 Mbit/s at 50 MHz, 1 Gbit/s over the router's five ports). The whole
design is synchronous to one clock.

### Router

Each router has five ports (EAST=0, WEST=1, NORTH=2, SOUTH=3, LOCAL=4).
Every input port has a 2-flit circular FIFO (`hermes_buffer`). A single
control unit (`hermes_control`) serves all of them.

1. When a header flit reaches the head of a FIFO, the buffer raises a
   request `h`.
2. The control unit serves one request at a time. It picks the next
   requesting port after the one it served last (round robin). It then
   routes that port's header by XY routing: it moves along X until the X
   coordinate matches, then along Y, and delivers on LOCAL when both
   match.
3. If the chosen output is free, the control unit writes the connection
   into two tables (the output for each input, and the input for each
   output) and acknowledges the buffer. If the output is busy, nothing is
   granted and the request is tried again in a later round. The header and
   everything behind it stay in the buffers in the meantime, and in the
   buffers of the routers behind (wormhole switching).
4. The connected buffer forwards the header and the length flit, then
   counts that many payload flits. After the last one it drops `sender`,
   and the control unit frees the output.

Five connections can be open at once. The crossbar is a set of
multiplexers driven by the two tables.

Serving one request takes the states IDLE, ARBITRATE, ROUTE, CHECK and
CONNECT. A header therefore spends 7 clocks in each router, and a packet of
P flits (header and length included) that crosses n routers, source and
target routers included, arrives in

    latency = 7 n + 2 P clocks

if nothing else is in its way. The count runs from the first clock the
source offers the header to the clock the target acknowledges the last
flit, both included. `tb_hermes_noc` checks this for every pair of IPs.

### Mesh

`hermes_noc` wires four routers into a 2x2 mesh. Ports on the border of
the mesh are tied off: they never receive and are never acknowledged. The
local ports are numbered x + 2y (0 = router 00, 1 = 10, 2 = 01, 3 = 11).

## Memory IP (`memory_ip`, `blockram`)

A Memory IP holds 1024 words of 16 bits in four `blockram`s of 1024 x 4
bits. Bank k holds bits 4k+3..4k of every word, and all four banks are
accessed together. The block RAM reads synchronously: the data appears one
clock after the access. It is write-first.

Three requesters share the banks, in fixed priority:

1. the processor interface (`ceR8`, `rwR8` = 1 for read, `addrR8`,
   `dinR8`, `doutR8`);
2. a word received in a write packet;
3. a word read for a read return.

The NoC receiver parses every incoming packet. A write stores its words at
consecutive addresses. A read is handed to the transmitter, which sends a
read return packet back to the requester. Packets with any other command
are acknowledged and dropped. The remote memory at router 11 is the same
module with its processor interface tied off.

## Processor IP (`processor_ip`, `proc_ctrl`)

A Processor IP is a Memory IP plus the control logic `proc_ctrl`. Both sit
behind one NoC local port, and the R8 core is attached to `proc_ctrl`.

### Address map seen by the core

| address | load | store |
|---------|------|-------|
| 0000h–03FFh | local memory | local memory |
| 0400h–07FFh | other processor's memory at address − 0400h | same |
| 0800h–0BFFh | remote memory at address − 0800h | same |
| FFFFh | scanf: ask the host for a word | printf: send the word to the host |
| FFFEh | – | wait until processor n (the stored value) sends a notify |
| FFFDh | – | send a notify to processor n |

Processor 1 is at router 01 and processor 2 at router 10. Any other
address is treated as local, using its low 10 bits.

### Core bus timing

The core drives `ce`, `rw`, `addr` and `dout`. A local access finishes in
the clock it is made, and the loaded word is on `din` in the next clock.
Any other access raises `waitR8` at once. The core must hold its request
while `waitR8` is high. The access finishes in the first clock where `ce`
is high and `waitR8` is low, and the loaded word is on `din` in the clock
after that. Between activations the core is held in reset (`resetR8`). An
activate packet releases it, so it starts at address 0. A second activate
restarts it. `haltR8` from the core marks it stopped until the next
activate.

### Sharing one NoC port

The Memory IP acknowledges every incoming flit. `proc_ctrl` does not
acknowledge anything: it reads each flit in the clock of that acknowledge,
while the sender still holds it. From those flits it picks out activate,
notify, read return and scanf return packets.

For sending, the two units hand the port over with `busyNoCR8` and
`busyNoCMem`:

- `proc_ctrl` raises `busyNoCR8` as soon as it has a packet to send. It
  starts sending only when `busyNoCMem` is low.
- The memory's transmitter starts a read return only while `busyNoCR8` is
  low. It then holds `busyNoCMem` high until the packet has gone.

`busyNoCR8` is low while the core waits for an answer. This matters: if
both processors read each other's memory at the same time, both memories
must still be able to reply.

A notify that arrives before the matching wait is remembered, one flag per
possible sender. The wait is handled inside the IP and no wait packet is
sent. The network only carries the notify.

## Serial IP (`serial_ip`, `uart_rx_autobaud`, `uart_tx`, `sync_fifo`)

After reset the host sends 55h. Sent least significant bit first after a
start bit, 55h gives five falling edges spaced two bit times apart. The
receiver counts the clocks between the first and the fifth edge, which is
eight bit times, and divides by eight. The result is the bit period for
both directions, in 8N1 frames.

Host commands (the bytes the host sends):

| bytes | meaning |
|-------|---------|
| `00 tgt cnt ahi alo` | read cnt words at address a of IP tgt |
| `02 tgt cnt ahi alo` + 2·cnt data bytes | write |
| `03 tgt` | activate the processor at tgt |
| `06 tgt hi lo` | answer a scanf of processor tgt |

For example, `00 01 01 00 20` reads one word of processor 1 at 0020h.

Bytes sent to the host:

| packet | bytes |
|--------|-------|
| read return | the data bytes only, e.g. `00 0F` for one word |
| printf | `04 src hi lo` |
| scanf | `05 src` |

Outgoing flits queue in a 16-flit FIFO, and header flits are queued as
soon as they are known, so a long write streams into the network while the
host is still sending it. Bytes for the host queue in a 16-byte FIFO. When
that FIFO is full the Serial IP stops acknowledging, which holds the
packet back in the network. If the flit FIFO is full, further host bytes
are lost: the host must not send faster than the network takes them.

## Top level (`multinoc`)

| port | direction | meaning |
|------|-----------|---------|
| `clock`, `reset` | in | system clock; reset is synchronous and active high |
| `tx` | in | serial data from the host |
| `rx` | out | serial data to the host |
| `r8_ce`, `r8_rw`, `r8_addr[2]`, `r8_dout[2]` | in | core bus requests; index 0 = processor 1, 1 = processor 2 |
| `r8_din[2]`, `r8_wait`, `r8_reset` | out | load data, hold, reset to the cores |
| `r8_halt` | in | a core has halted |

The top has no parameters: every size is fixed to the prototype's.

## Where this RTL departs from, or adds to, the published description

- **R8 core.** It is not included; its bus is brought out at the top.
  `tb/r8_bfm.sv` is a test-only stand-in. It executes a list of bus
  operations (`{kind, address, value}` triples) fetched from the local
  memory, not R8 machine code.
- **Clock.** The prototype divides a 50 MHz board clock by two in an FPGA
  clock DLL. That block is not included: `clock` is the system clock.
- **Handshake.** The original calls the router handshake asynchronous. Here
  it is a fully synchronous two-clock handshake, which gives the stated
  minimum of two clocks per flit.
- **Remote addresses.** The original address-map listing writes the
  global address as `1024 − address` and `2048 − address`. That would be
  negative for the whole range, so this RTL uses `address − 1024` and
  `address − 2048`.
- **Wait packet.** "Wait" is listed among the nine packet services, but the
  wait itself is only described as a store at FFFEh. It is handled inside
  the Processor IP and never sent.
- **Chosen here.** The following are this implementation's own choices:
  the packet layout beyond the first two flits and the command codes; the
  host byte formats other than the read; the FIFO depths; reset; the
  `rwR8` polarity; the `resetR8` signal; the fact that unmapped addresses
  fall through to local memory.
- **Parallel edge detection.** The original shows this application only as
  a screenshot, without an image size or code. `tb_multinoc_edge`
  reproduces its data flow on a small image with the bus-functional core.
  The host keeps three image rows in the remote memory. Processor 1
  computes the horizontal gradient of the middle row. Processor 2 computes
  the vertical one, waits for processor 1's notify, adds the two and
  reports the line with a printf. The host then reads the line back and
  sends the next row. The image size, the memory layout and the
  notify/wait hand-over are this test's own choices.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With
plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/multinoc_pkg.sv tb/tb_multinoc.sv --top-module tb_multinoc
./obj_dir/Vtb_multinoc
```

| testbench | what it shows |
|-----------|---------------|
| `tb_blockram` | all 1024 addresses, write-first, hold when disabled |
| `tb_hermes_buffer` | 2-flit limit, header request, packet-length tracking, 2 clocks per flit |
| `tb_hermes_control` | XY routing to all five outputs, round robin over five requests, waiting on a busy output |
| `tb_hermes_router` | 7-clock routing step, five parallel connections, serialised contention |
| `tb_hermes_noc` | latency formula for all 12 source/target pairs, wormhole blocking |
| `tb_memory_ip` | write/read packets, processor priority, `busyNoCR8` |
| `tb_proc_ctrl` | every area of the address map at its edges, early notify, `busyNoCMem` |
| `tb_processor_ip` | program load, activate, all processor services, wait/notify |
| `tb_serial_ip` | 55h baud detection, all host commands, all host-bound messages, back-pressure |
| `tb_multinoc` | both processors and the host working together (see below) |
| `tb_multinoc_fig9` | the prototype's debugging session: six scanf values summed, printf 000Fh, host read `00 01 01 00 20` returning `00 0F` |
| `tb_multinoc_edge` | two lines of parallel edge detection (gx on processor 1, gy and the sum on processor 2), with programs longer than one write packet |

`tb_multinoc` runs the full chip at its only size. The host loads two
programs, reads processor 1's memory back while both processors start,
answers a scanf and checks two printf results and four memory words.
Processor 1 fetches from its memory while that memory is streaming a read
return, and processor 2's printf queues behind it in router 00. The
testbench counts each mechanism it is meant to exercise and fails if one
never happened:

- contention for an output port;
- a full input buffer;
- processor priority at the memory banks;
- the `busyNoCR8`/`busyNoCMem` hand-over;
- the wait state;
- each of the eight packet services that are sent.

In all testbenches the serial bit period is 8–16 clocks so that runs stay
short. The baud detection works the same for the real 25 MHz / 9600 baud
ratio, which is about 2600 clocks per bit: the counter allows up to 2^20
clocks per byte.
