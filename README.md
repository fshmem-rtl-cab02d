# FSHMEM node: GASNet active messages in FPGA hardware

FSHMEM lets a group of FPGAs run programs written for a partitioned global
address space (PGAS). Each FPGA owns a slice of one global memory. Any node
can write into another node's slice (PUT) or read from it (GET). It can also
start work on another node's accelerator, and the remote host takes no part
in any of this.

The mechanism comes from GASNet's *active messages* (AM). Every message
names a handler that the receiver runs on arrival. Software GASNet carries a
function pointer for this. Here the message carries a small **handler
opcode**, and the receiving FPGA runs the handler in logic. So a PUT, a GET
or a "compute" request arriving from the network is served entirely on the
FPGA. The messages travel over the board's serial links (QSFP+), one link
per port, at 128 bits per 250 MHz clock, so a link's ceiling is 4000 MB/s.

This repository holds synthesizable SystemVerilog for one node:
- the host register interface;
- the GASNet core: per network port, a command scheduler, an AM sequencer
  and an AM receive handler;
- read and write DMA engines;
- a memory interconnect and three on-chip memory banks;
- the compute core's controller with Automatic Result Transfer (ART);
- a latency counter.

Three things sit outside and appear only as ports:
- the accelerator itself (an Intel deep learning accelerator, "DLA", in the
  original system);
- the PCIe block;
- the serial transceivers.

## The node at a glance

```
          host (PCIe MMIO / memory)                  DLA (external)
              |            |                        cmd |   ^ mem
          host_if      hmem master                      v   |
   cmd   /   |   \          |                 compute_controller + ART
        v    v    v         |                      ^         | PUT cmds
   port 0 .. port 1    compute queue  <------------+         |
   +------------------------------------------------------------------+
   | gasnet_core (one set per network port)                            |
   |  am_scheduler (host | ART | GET reply) -> FIFO -> am_sequencer -> tx
   |  rx -> am_rx_handler -> write DMA client                           |
   |          |-> GET: PUT reply command back to this port's scheduler  |
   |          '-> COMPUTE: arguments to the compute command scheduler   |
   +------------------------------------------------------------------+
          rd_dma (shared)      wr_dma (shared)
               \                  /
   host --- mem_interconnect (4 masters x 3 banks) --- DLA memory port
                 |        |        |
               bank 0   bank 1   bank 2
               \_ shared _/      local
```

`fshmem_node` is the top. Two nodes connect by wiring one node's `tx` port
to the other's `rx` port. Any topology can be built this way, since every
port is an independent point-to-point link.

## Active messages on the wire

A message is cut into **packets**. Every packet starts with one 128-bit
header flit, followed by up to `PKT_BYTES` bytes of payload (16 bytes per
flit). `PKT_BYTES` is a host register: 128, 256, 512 or 1024, default 1024.
Header layout (`am_hdr_t` in `fshmem_pkg`):

| bits    | field    | meaning |
|---------|----------|---------|
| 127:96  | arg1     | handler argument 1 |
| 95:64   | arg0     | handler argument 0 |
| 63:48   | len      | payload bytes in this packet |
| 47:16   | addr     | destination address of this packet's payload (segment offset) |
| 15:12   | src_node | sender's node id |
| 11:8    | handler  | 1 PUT, 2 GET, 3 COMPUTE |
| 7:6     | mtype    | 0 short, 1 medium, 2 long |
| 5       | reply    | an AM reply rather than a request |
| 4       | last     | last packet of the message: run the handler |
| 3:0     | -        | reserved, zero |

Every header repeats the handler and arguments and carries its own address.
The receiver therefore needs no state between packets except "a message is
in progress". It runs the handler once, on the packet marked `last`.

The three message classes decide where the payload goes:

- **short**: no payload (a GET request, or a compute command with
  arguments only);
- **medium**: the payload goes to the *local* (private) segment;
- **long**: the payload goes to the *shared* (globally addressed) segment.
  PUT and GET data travel as long messages.

The address in a header is an offset into the chosen segment. The receiver
adds the segment base, so a sender needs no knowledge of the receiver's
memory map.

## What the handlers do

**PUT (remote write).**
1. The sender's host fills the command registers: source address, remote
   offset, length, type long, handler PUT, port.
2. It rings the doorbell. The command passes through the port's scheduler
   queue to the AM sequencer.
3. For each packet, the sequencer sends the header and, in the same cycle,
   asks the read DMA for the packet's payload.
4. At the receiver, the AM receive handler hands the write DMA a descriptor
   in the cycle it accepts the header. The payload flits then stream
   straight into memory.

**GET (remote read).**
1. The requester sends a *short* message with handler GET:
   - `addr` = where the data should land in the requester's shared segment;
   - `arg0` = the source address on the remote node;
   - `arg1` = the byte count.
2. The remote receive handler builds a PUT command from these: long, reply
   bit set, source `arg0`, destination `addr`, length `arg1`.
3. It hands that command to the scheduler of the **same port** the GET
   arrived on. A reply can only go back to the node that asked.
4. From there it is an ordinary PUT back to the requester. The remote host
   is never involved.

**COMPUTE.**
1. The receive handler first writes any payload and waits for the write
   DMA's `done`. Data sent with a compute request is therefore in memory
   before the accelerator starts.
2. It then pushes `{src_node, arg0, arg1}` into the compute command
   scheduler. That scheduler also takes commands from the two ports and the
   local host.
3. The compute controller hands the commands to the DLA one at a time.

**Atomicity.** A receive handler finishes one message completely (payload
written, handler action accepted downstream) before it takes the next
header. Handlers on one port therefore never interleave. This is how this
design makes handler execution atomic in hardware.

## Sending side: scheduler, sequencer, read DMA

`am_scheduler` takes commands from up to three sources:
- the host;
- ART (only on the port ART is configured to use);
- the port's own receive handler (GET replies).

It serves them round-robin into an 8-entry FIFO. A source whose command is
not granted simply waits (valid/ready).

`am_sequencer` pops one command at a time. For payload messages it loops
over packets:
- each packet's payload length is `min(bytes left, PKT_BYTES)`;
- source and destination addresses advance by that amount;
- `last` is set on the final packet.

A transfer whose length is not a multiple of 16 sends a whole last flit. The
receiver's write DMA masks the excess bytes with byte enables.

`rd_dma` is shared by the two sequencers. It serves one burst at a time and
gives the ports turns. It issues reads only while its 8-word output buffer
has room, counting words already in flight (credit check), so a stalled
link never loses data. `wr_dma` mirrors it for the two receive handlers. Its
descriptor is `(address, bytes)`, and it pulses `done` one cycle after
writing the last word.

### Throughput

A packet costs its payload flits plus three cycles:
- one for the header;
- two while the first payload word comes back from memory (interconnect
  grant, then bank read).

With `P` payload flits per packet, the sustained rate is `4000 * P / (P+3)`
MB/s. This gives the following bandwidths for a 2 MiB transfer between two
nodes (node-to-node time, from the command leaving the host interface to
the last payload word written):

| packet | PUT MB/s | GET MB/s | share of 4000 MB/s |
|--------|----------|----------|--------------------|
| 128 B  | 2909     | 2908     | 73 % |
| 256 B  | 3368     | 3368     | 84 % |
| 512 B  | 3657     | 3656     | 91 % |
| 1024 B | 3820     | 3820     | 95.5 % |

Small transfers are slower because each message has a fixed cost before
its first payload word arrives. GET pays more of it, because the request
must first reach the remote node and be turned into a reply there. So GET trails PUT for small and medium sizes
and matches it for large ones. Example with 1 KiB packets:

| transfer | PUT MB/s | GET MB/s |
|----------|----------|----------|
| 64 B     | 1600     | 1230     |
| 2 KiB    | 3737     | 3657     |

These figures leave out the serial link's own latency. Real transceivers add
tens to hundreds of nanoseconds, which moves the half-bandwidth point to
larger transfers. That delay does not change the peak rates above.

## Receiving side

`am_rx_handler` has four states:
- **IDLE**: wait for a header;
- **DATA**: pass payload flits to the write DMA;
- **WAIT**: wait for the write DMA's `done`;
- **ACT**: hand over the GET reply or the compute command.

A message with no payload and no action returns to IDLE right after its
header. `hdr_seen` pulses when a header is taken (the latency counter
stops on this). `msg_done` pulses when a message is complete (the host
reads per-port message counters built from it).

## Memory

| byte address          | bank | segment |
|-----------------------|------|---------|
| 0x00_0000 - 0x0F_FFFF | 0    | shared  |
| 0x10_0000 - 0x1F_FFFF | 1    | shared  |
| 0x20_0000 - 0x2F_FFFF | 2    | local   |

Each bank holds 65536 words of 128 bits (1 MiB) with byte enables and a
one-cycle read latency. The shared segment is 2 MiB, so a 2 MB transfer
fits. `mem_interconnect` is a crossbar with four masters (host, read DMA,
write DMA, DLA) and a round-robin arbiter per bank. Different banks serve
different masters in the same cycle. An address beyond the last bank is
granted and reads as zero, so a bad address cannot hang a master. Bank size
and count are parameters (`BANK_WORDS` in `fshmem_pkg`, `BANK_WORDS_P` on the
top).

The original board also has DDR memory. Off-chip memory is not part of this
RTL: all segments are on-chip.

## Compute core and Automatic Result Transfer

`compute_controller` pops compute commands and drives the DLA's command
port (`dla_valid/ready`, `comp_cmd_t`). It waits for `dla_done` and then
counts an acknowledgement (`COMP_DONE` register). The DLA reads and writes
node memory through its own master port (`dmem_*`).

Without ART, a host would poll for the acknowledgement and then send one
large PUT of the results. The link would sit idle during the computation,
and the whole transfer would be exposed afterwards. **ART** instead watches
the DLA's result writes:
- Every write the interconnect grants on the DLA port counts as one valid
  result. The count is taken from the grant, so the word is already in the
  bank when ART reads it.
- After every `N` results, ART queues a long PUT of those `N` words to the
  scheduler of the configured port. Result `k` goes from
  `ART_SRC + 16k` to `ART_DST + 16k`.
- When the DLA signals done, any remainder smaller than `N` goes out as one
  last PUT.
- A new compute command starts only after ART has sent everything from the
  previous one. A following command therefore cannot overwrite results that
  are still waiting to be sent.

In the end-to-end testbench, a remote COMPUTE message makes a DLA
stand-in produce 10 results with `N = 4`. The testbench checks that the
remote node receives all of them as two full chunks and a remainder of two.
This happens while the same port also carries twelve 2 KiB PUTs from the
host, so the scheduler must interleave them.

## Host registers

The host sees 64-bit registers (`mmio_addr`, write `mmio_wr`, read `mmio_rd`
with data the next cycle):

| index | name | use |
|-------|------|-----|
| 0 | CMD_SRC | local source address |
| 1 | CMD_DST | remote offset (PUT/medium) or reply destination (GET) |
| 2 | CMD_LEN | total payload bytes |
| 3 | CMD_ARGS | `{arg1, arg0}` |
| 4 | CMD_GO | doorbell: `[1:0]` type, `[2]` reply, `[6:3]` handler, `[9:8]` target (0/1 port, 2 local compute queue) |
| 8 | PKT_BYTES | payload bytes per packet, multiple of 16 (reset 1024) |
| 9 | NODE_ID | this node's id |
| 10 | ART_CTRL | `[16]` enable, `[15:0]` N |
| 11, 12, 13 | ART_SRC, ART_DST, ART_PORT | ART addresses and port |
| 16 | STATUS | bit 0: a command is still waiting for its target |
| 17, 18 | RX_MSG0, RX_MSG1 | messages completed on port 0 / 1 |
| 19 | COMP_DONE | compute acknowledgements |
| 20 | ART_SENT | PUTs issued by ART |
| 21 - 24 | PERF_LAT, PERF_T_START, PERF_T_HDR, PERF_CYCLES | latency counter |

A doorbell rung while STATUS bit 0 is set is ignored. Software polls STATUS
before issuing.

For a GET, set type short, handler GET and the port. Then:
- CMD_DST is where the data should land locally;
- arg0 is the remote source address;
- arg1 is the byte count.

The host reaches memory directly through the `hmem_*` master port, for
example to load inputs.

## Latency counter

`perf_counter` runs a free cycle counter. It captures the cycle a host
command leaves `host_if` and the cycle the next header arrives on any port.
Their difference is `PERF_LAT`.
- For a GET, the header seen is the reply coming back, so `PERF_LAT` on
  the requester is the GET latency.
- For a PUT, the header arrives at the remote node. The latency is the
  remote node's `PERF_T_HDR` minus the sender's `PERF_T_START`. This holds
  only when both cycle counters started together, as in the testbench,
  where both nodes share a clock and reset.

With the two nodes wired directly, a one-packet PUT measures 2 cycles and a
GET 5 cycles. On hardware, add the transceiver and cable delay each way.

## Departures and open points

- **Exact formats are this design's own.** The header layout, opcode
  numbers, command layout, memory map, register map and bank size are not
  given by the original description. They are chosen to be simple and are
  defined in one place (`fshmem_pkg`, `host_if`).
- **Round-robin arbitration** everywhere (schedulers, DMAs, interconnect),
  and FIFO depth 8, are choices.
- **The host is an extra input to the compute command scheduler**, so a
  host can start its own accelerator.
- **The ART remainder flush** at DLA done is added so that no results are
  left behind when the count is not a multiple of N.
- **Peak bandwidth differs.** With 128 B packets this design is faster than
  the measured original system (73 % against about 65 % of the link
  ceiling). At 512 B it is slightly slower (91 % against 95 %). The
  per-packet cost here is 3 cycles. The reported curves imply a larger
  fixed cost per small packet but a smaller one per large packet, which
  points to link-layer effects that are not modelled.
- **Latencies are cycle counts inside the FPGA logic.** The reported
  0.2 - 0.6 us figures include PCIe and transceivers, so they cannot be
  compared directly.
- **Not built:** the DLA's internals, PCIe and the transceivers (ports
  only), off-chip DDR, routing for multi-hop networks, and the host
  software. The GASNet functions that are software in the original system
  (job control, barriers) are also absent.

## Simulating

Every file is plain SystemVerilog. With Verilator 5, a testbench builds as:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/fshmem_pkg.sv tb/tb_fshmem_node.sv \
  --top-module tb_fshmem_node -o sim
obj_dir/sim
```

Each testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`. A watchdog ends it with a failure if it
hangs.

| testbench | what it exercises |
|-----------|-------------------|
| `tb_sync_fifo`, `tb_am_scheduler`, `tb_bram_bank`, `tb_mem_interconnect`, `tb_rd_dma`, `tb_wr_dma` | building blocks, with random backpressure against reference models |
| `tb_am_sequencer` | packetisation and the 95 % link rate with 1 KiB packets |
| `tb_am_rx_handler` | segment mapping, GET reply, COMPUTE after payload, atomic handling |
| `tb_art_unit`, `tb_compute_controller` | ART chunking, remainder flush, command sequencing |
| `tb_perf_counter`, `tb_host_if` | latency capture, register map, doorbell |
| `tb_gasnet_core` | one core looped back onto itself over both ports |
| `tb_fshmem_node` | two full-size nodes with a DLA stand-in (`tb/dla_model.sv`). It covers PUT, GET, medium messages, remote COMPUTE with ART under link contention, latency, small packets, and counts each mechanism |
| `tb_bandwidth` | the bandwidth sweep: 4 B to 2 MiB, packets 128 - 1024 B, PUT and GET, printed as a table |

`tb_fshmem_node` and `tb_bandwidth` use the top at its default parameters.
`tb_bandwidth` simulates about 5 ms of device time in a few seconds.
