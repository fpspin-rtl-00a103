# FPsPIN application block: turning a packet-processing cluster into a smart NIC

sPIN lets users install small C functions, called *handlers*, that run on a NIC for
each incoming packet of a matching traffic class. PsPIN is an open RISC-V
implementation of such a packet processor. It has handler cores (HPUs), a scheduler
and an L2 memory holding packet buffers, handler code and handler state. On its own
it cannot receive or send Ethernet frames, and it cannot reach host memory. FPsPIN
places PsPIN in the user-application slot of the Corundum FPGA NIC and adds the glue
that makes the combination a working smart NIC.

This repository holds that glue as synthesizable SystemVerilog:

- an **ingress datapath**. It decides per received frame whether a handler wants it.
  If so, it finds room for the frame in PsPIN's packet buffer, copies it there and
  asks PsPIN to run the handler.
- an **egress DMA**. It sends frames that handlers produce, merging them into the
  NIC's own transmit stream.
- a **host memory bridge**. It turns PsPIN's AXI4 accesses to host memory into
  descriptor DMA commands, including unaligned writes.
- **control registers**. The host uses them to start the cluster, load match rules
  and handler contexts, and read what handlers print.

PsPIN itself and Corundum (MAC, PCIe, queues, DMA engine) are not part of the RTL.
Every signal that would reach them is a port of the top module `fpspin_top`. The
testbenches contain behavioural stand-ins for both.

```
                 +------------------------------- fpspin_top ------------------------------+
 Corundum RX --->| pspin_pkt_match --no match------------------------------------------> RX to host
                 |       | match                                                           |
                 |   data FIFO   meta FIFO --> pspin_pkt_alloc <---- completions ----------|<-- PsPIN
                 |       |                          | (slot address)                       |
                 |       +------> pspin_ingress_dma <+                                     |
                 |                       | AXI4 writes ----------------------------------->|--> PsPIN L2 (NIC in)
                 |                  pspin_her_gen ---- handler execution request --------->|--> PsPIN scheduler
                 |                                                                          |
 host TX ------->| pspin_egress_dma: arbiter <--- stream <--- AXI4 reads <-----------------|<-- PsPIN L2 (NIC out)
 MAC TX <--------|                                      <--- send commands ----------------|<-- PsPIN
                 |                                                                          |
 DMA engine <--->| pspin_hostmem_dma (bounce buffer) <--- AXI4 host master ----------------|<-- PsPIN
 host AXI-Lite ->| pspin_ctrl_regs: cluster reset/fetch, stdout FIFO, rulesets, contexts   |
                 +--------------------------------------------------------------------------+
```

There are two clocks, both with a synchronous, active-high reset:

- **`clk`/`rst`** is the PsPIN side, 40 MHz in the prototype. It clocks the cluster's
  ports, the control registers, the ingress datapath and the egress DMA.
- **`nic_clk`/`nic_rst`** is the Corundum side, 250 MHz in the prototype. It clocks
  the receive and transmit streams, the host's AXI-Lite bus, and the host memory
  bridge with its DMA-engine ports.

Everything that passes between the two sides goes through a `pspin_async_fifo`:

- the four streams;
- the five AXI-Lite channels;
- the five channels of PsPIN's host master.

The FIFO is a Gray-code pointer queue with two-flop synchronisers. An entry needs
3 to 4 cycles of the receiving clock to cross. Streams and the AXI data channels
get 16 entries, address and response channels 4. Both resets must be asserted
together.

## 1. Choosing which frames go to the handlers (`pspin_pkt_match`)

A NIC that took every frame away from the operating system would break ARP and
everything else the host relies on. So by default every frame goes back to
Corundum's receive path, and only frames that match a loaded *ruleset* are diverted
to PsPIN.

### The rule

A rule has four fields: a word index `I` (0..15), a 32-bit `mask`, and an inclusive
range `start`..`end`. The matcher takes the four frame bytes `4I .. 4I+3` as one
32-bit word in network order, so byte `4I` is the most significant. It ANDs the word
with the mask. The rule hits if the result lies in `start..end`.

Example: to test that byte 34 (the ICMP type field) equals 8, use `I = 8` (bytes
32..35) and `mask = 0x0000ff00`, which keeps byte 34 alone. Then set `start = end =
0x00000800`. A single value is tested by setting `start = end`. A range of ports
needs only one rule.

A rule with `start > end` can never hit. This is the "false" rule, and every rule
resets to it (`start = 1`, `end = 0`). So after reset no frame matches and the NIC
behaves like a plain NIC.

Only the first 64-byte beat can be examined. Headers of variable length, such as
IPv4 options, therefore cannot be followed. A handler that needs that must match
broadly and filter in software.

### The ruleset

Each of the `NUM_RULESETS` = 4 rulesets has four rules and a mode bit:

| rule | role |
|---|---|
| 0, 1, 2 | combined by AND (mode 0) or OR (mode 1); the result decides whether the frame matches |
| 3 | *end of message*: if it hits on a matching frame, the HER carries `eom = 1` and PsPIN runs the tail handler |

An unused rule in AND mode must be set to always hit, for example `mask = 0`,
`start = end = 0`. In OR mode an unused rule must be set to never hit.

All rulesets are evaluated in parallel. The lowest-numbered one that matches wins,
and its number becomes the frame's *execution context*. The context selects which
handlers run and which host memory region they may use (see section 4).

The matcher also extracts a 32-bit message ID from bytes 44..47 (`MSGID_IDX` = 11).
In a UDP frame that is the Message ID field of the SLMP header. SLMP is the simple
reliable message protocol that the handlers implement in software. Its 10-byte
header follows the 42 bytes of Ethernet, IPv4 and UDP headers:

| bytes | field |
|---|---|
| 42..43 | flags: SYN, ACK, EOM |
| 44..47 | message ID |
| 48..51 | offset of the payload within the message |

### Timing

The matcher is a four-stage pipeline:

1. register the beat;
2. evaluate all 16 rules;
3. combine the rules and pick the winning ruleset;
4. output register.

A beat leaves exactly four cycles after it was accepted. All stages advance together
whenever the output register is empty or is being taken, so the matcher sustains one
beat per cycle. The decision made on the first beat is carried by every later beat of
the same frame.

A matched frame's metadata (context, message ID, EOM, length in bytes) is issued
together with its last beat. That beat leaves only when both the data and the
metadata are accepted.

## 2. The packet buffer (`pspin_pkt_alloc`, `pspin_slot_pool`)

PsPIN frees packet buffers in whatever order its handlers finish, which a ring buffer
handles badly. The allocator instead relies on traffic being bimodal, mostly very
small frames or full-MTU ones. It uses fixed slots:

| half of the 512 KiB buffer | slot size | slots |
|---|---|---|
| lower (`BUF_BASE + 0 .. 256 KiB`) | 128 B | 2048 |
| upper (`BUF_BASE + 256 KiB ..`) | 1536 B | 170 (the last 256 B are unused) |

Frames of up to 128 bytes take a small slot, all others a large one. A 1514-byte MTU
frame fits in a large slot; longer frames are not supported, and an assertion checks
this.

Each half keeps its free slots in a FIFO (`pspin_slot_pool`), so allocating is a pop
and freeing is a push. After reset the FIFO is empty. A counter hands out slots that
have never been used until it runs out, so no fill phase is needed.

A completion notification from PsPIN returns the slot. Its address tells which half,
and so which FIFO, it goes back to.

Allocation is combinational, taking zero cycles. The address is added to the
metadata in the cycle the metadata passes. If the required pool is empty, the
metadata waits. Because matched data waits in a FIFO behind it, the back-pressure
reaches the receive port: the NIC stalls rather than drops. With the default size the
171st large frame held by unfinished handlers stalls the input.

`SLOT_FREE` (register 0x000C) shows the current free counts.

## 3. Getting a frame into PsPIN (`pspin_ingress_dma`, `pspin_her_gen`, `pspin_ingress_datapath`)

The matcher learns a frame's length only at its last beat, but the allocator needs
the length before any data can be written. So matched data waits in a 32-beat FIFO,
enough for one 1536-byte frame, and the metadata waits in an 8-entry FIFO until the
allocator has placed it.

`pspin_ingress_dma` then writes the frame into its slot through PsPIN's NIC-inbound
AXI4 slave. It uses one INCR burst of 64-byte beats, with write strobes equal to
`tkeep`, so the bytes after the frame's end are left alone. The metadata moves on
only after the write response has arrived, so the handler can never see a partly
written frame.

With a slave that never waits, a frame of `n` beats takes `n + 3` cycles from
metadata in to metadata out: 4 cycles for a minimum frame and 27 cycles for a full
slot.

`pspin_her_gen` turns the metadata into a *handler execution request* (HER) without
adding a cycle. The HER holds:

- from the frame: message ID, EOM, slot address and frame size;
- from the matched context: the addresses and sizes of the header, packet and tail
  handlers, the handler memory region, and the host memory region.

| stage | cycles |
|---|---|
| matcher | 4 |
| allocator | 0 |
| ingress DMA | n + 3 for n beats (4..27) |
| HER generator | 0 |

## 4. Control registers (`pspin_ctrl_regs`)

The host reaches these registers over a 32-bit AXI4-Lite slave with a 16-bit address.
A write completes one cycle after both AW and W are present. A read returns one cycle
after AR. Undefined addresses read 0 and ignore writes. Byte strobes are honoured.

| address | name | meaning |
|---|---|---|
| 0x0000 | CTRL | bit 0 fetch enable (reset 0), bit 1 cluster reset (reset 1) |
| 0x0004 | STDOUT | oldest word printed by a handler; reading removes it; 0 if empty |
| 0x0008 | STDOUT_CNT | words waiting (FIFO of `STDOUT_DEPTH` = 256) |
| 0x000C | SLOT_FREE | [15:0] free small slots, [31:16] free large slots |
| 0x0100 + 0x80·s | RS_MODE | ruleset `s` mode: 0 AND, 1 OR |
| 0x0110 + 0x80·s + 0x10·r | RULE | rule `r` of ruleset `s`: +0 index, +4 mask, +8 start, +C end |
| 0x0400 + 0x40·c | CTX | context `c`: see below |

Context `c` fields, as offsets from its base:

| offset | field |
|---|---|
| +00 / +04 | handler memory address / size |
| +08 / +0C | host memory address, low / high 32 bits |
| +10 | host memory size |
| +14 / +18 | header handler address / size |
| +1C / +20 | packet handler address / size |
| +24 / +28 | tail handler address / size |

A typical start-up:

1. Load the handler code into PsPIN's program memory. That memory belongs to the
   cluster and is not part of this block.
2. Write the context.
3. Write the rules and the mode.
4. Write CTRL = 1, which releases the cluster reset and enables fetching.

HERs wait, back-pressuring the ingress path, until the cluster is running.

## 5. Sending frames (`pspin_egress_dma`, `pspin_axis_arb`)

A handler sends a frame by passing a command to this block. The command holds the
frame's L2 address, its length and an 8-bit tag.

The block reads the frame with one INCR burst through PsPIN's NIC-outbound AXI4 slave
and turns the read beats into stream beats. It trims `tkeep` on the last beat to the
length. Once the last beat has left, it reports the tag on `m_done_tag` and
`m_done_valid` so the handler can continue.

The source address must be 64-byte aligned, which any slot address is; an assertion
checks it. One command is handled at a time.

The resulting stream and the host's own transmit stream are merged frame by frame by
a round-robin arbiter. A frame is never interleaved with another, and neither source
can starve the other.

## 6. Handlers reaching host memory (`pspin_hostmem_dma`)

The part of the design that takes most care is the host memory bridge.

PsPIN's host master speaks AXI4. Corundum's DMA engine instead takes commands
(host address, buffer address, length, tag), reads or writes a local buffer, and
reports completion with the tag. The bridge owns a 4 KiB dual-port bounce buffer (64
words of 64 bytes). Its AXI side uses one port. The DMA engine uses the other through
the `dma_ram_*` ports: a write port with byte enables, and a read port with one cycle
of latency.

### Writes

AXI has no way to say "write 37 bytes starting at address 0x…05". It sends whole
aligned beats and marks the valid bytes with strobes. A handler that deserializes
data (for example MPI derived datatypes) writes unaligned pieces all the time.
Turning each such piece into read-modify-write traffic on the host would cost up to
two extra reads per write.

The bridge instead recovers the original transfer from the strobes:

```
first_off = index of the lowest set strobe bit of the first beat
last_hi   = index of the highest set strobe bit of the last beat
address   = (AWADDR & ~63) + first_off
length    = 64 * beats - first_off - (63 - last_hi)
```

It stores beat `i` in buffer word `i`. It then issues one DMA write command for
`length` bytes starting at buffer byte `first_off`. The DMA engine handles unaligned
transfers natively.

For example, a 37-byte write to `0x…3E` arrives as two beats:

- beat 0 has strobe bits 62..63 set;
- beat 1 has strobe bits 0..34 set.

That gives `first_off = 62`, `last_hi = 34`, `address = 0x…3E` and
`length = 128 - 62 - 29 = 37`.

The write response B is sent only after the DMA engine reports completion, so a
handler that waits for B knows the data has reached the host.

### Reads

Reads work the other way round. One DMA read command fetches the aligned region the
burst covers into the buffer. The words then go back as R beats, at two cycles per
beat: buffer read, then R.

### What the bridge does not support

Like the adapter it models, the bridge supports only these bursts:

- INCR bursts of full 64-byte beats;
- one transaction at a time, with no interleaving; writes go first when both kinds
  wait;
- strobes contiguous from the first valid byte to the last;
- bursts that stay inside one 4 KiB page, as AXI requires anyway.

Assertions check these rules. PsPIN's DMA master does not issue anything else.

## 7. Shared types (`fpspin_pkg`)

Every interface between blocks is a packed struct with a valid/ready pair. The
package defines:

- the bus widths: 512-bit data, 64-bit AXI addresses, 4-bit AXI IDs, 16-bit lengths;
- the slot sizes;
- the rule and ruleset types;
- the metadata, context, HER, completion and egress-command records;
- the AXI channel structs;
- the DMA command and status records;
- three helpers: `beats_of`, `last_keep`, `keep_count`.

`pspin_fifo` is a generic FIFO, parameterised by type, used for the ingress queues
and the stdout queue.
`pspin_async_fifo` is its counterpart for two clocks. Only the top uses it, at
every point where the Corundum side meets the PsPIN side.

It works like this:

- Each side counts its pointer in binary, one bit wider than the address.
- Each side publishes that pointer in Gray code from a register.
- The other side samples it through two flip-flops.

Gray code changes one bit per step, so a sample taken mid-change is either the old
pointer or the new one, never a mix.

- **Empty:** the two pointers are equal.
- **Full:** they differ only in their top two Gray bits.

The reader reads the storage array without a clock. That is safe because an entry
is only read after its write pointer has crossed, so the entry has been stable for
at least two reader cycles.

## 8. Where this RTL departs from the original

- **DMA engines.** The original builds the ingress and egress copies around
  Corundum's generic AXI DMA modules, and the host bridge around its AXI-Stream DMA
  clients. Here each is a small dedicated state machine with the same job. As a
  result the ingress copy is quicker (n + 3 cycles) than the 8 to 70 cycles quoted
  for the original.
- **Unaligned egress.** The egress reader needs 64-byte aligned sources and does not
  support unaligned ones.
- **DMA engine interface.** Corundum's segmented RAM interface is reduced to one
  512-bit word port.
- **Clocking.** The prototype gives only the two frequencies and which parts run
  at which. The crossing points, the FIFO depths, and placing the egress arbiter and
  the control registers on the 40 MHz side are this design's own choices.
- **The rule range.** One description of the rule says the masked value must lie
  "between S and M". This RTL uses start..end, as the rest of the description and
  the ICMP example require.
- **This design's own choices.** These are: the number of rulesets and contexts (4),
  the register map and reset values, the message-ID position, the FIFO depths, which
  half holds which slot size, back-pressure when a pool is empty, and B only after
  DMA completion.
- **Out of scope.** The cluster and its memories are not part of this block.
- **Not built.** The original lets the host read and write PsPIN's memories through
  the application block's address space. That is how handler code is uploaded. This
  RTL has no such window: `s_axil_*` reaches only the registers above.

## 9. Verification

Each block has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_pspin_pkt_match` | AND and OR rulesets, EOM rule, ARP bypass, byte order; exactly 4 cycles of latency |
| `tb_pspin_pkt_alloc` | full-size pools (2048 / 170), exhaustion and stall, out-of-order frees, no slot handed out twice |
| `tb_pspin_ingress_dma` | memory contents and strobes for every frame size, latency n + 3 |
| `tb_pspin_her_gen` | every HER field against the context table |
| `tb_pspin_ingress_datapath` | 800 mixed frames through the whole ingress path at full size; overlapping rulesets (lowest wins); 170-slot exhaustion and recovery |
| `tb_pspin_egress_dma` | frame contents, `tkeep`, completion tags, merging with host traffic under contention |
| `tb_pspin_hostmem_dma` | recovered address and length for random unaligned writes, neighbouring bytes untouched, B after completion, reads |
| `tb_pspin_ctrl_regs` | register map, reset values, byte strobes, stdout FIFO order, count and full (depth reduced to 16) |
| `tb_pspin_async_fifo` | clock crossing at 40 MHz and 250 MHz in both directions: order and data under random handshakes, capacity, crossing latency |
| `tb_fpspin_top` | end to end at default parameters (below) |
| `tb_fpspin_workloads` | the evaluated traffic at default parameters (below) |

`tb_fpspin_top` runs the top with every parameter at its default. It plays the host,
the cluster (`tb_l2_mem` as L2 memory, plus a handler model) and Corundum (receive,
transmit and a DMA engine with host memory). It:

1. programs two contexts and two rulesets over AXI-Lite;
2. shows matched frames waiting while the cluster is held in reset;
3. runs 500 mixed frames and 80 host transmissions. SLMP frames have their payload
   written to host memory at unaligned offsets. Ping frames are echoed with swapped
   MAC addresses. End-of-message frames read their data back and print their message
   ID to stdout;
4. holds the handlers back until all 170 large slots are taken, and checks that the
   receive port stalls.

Each mechanism (bypass, AND, OR, EOM, small and large slots, stall, echo, arbitration
contention, unaligned host write, host read, stdout, HER held in reset) is counted,
and one that never happens is a failure.

`tb_fpspin_workloads` runs the kinds of traffic FPsPIN is evaluated with, again at
default parameters:

- **ICMP ping-pong.** It uses the ICMP echo-request ruleset from section 1, with
  rule 3 set to "false", and a handler that rewrites the request into a reply in
  place. Echo replies must reach the host instead.
- **UDP ping-pong.** The handler swaps addresses and ports.
- **SLMP file transfers.** Windows are 4, 16 and 512 segments of 1000 payload bytes.
  The handler copies each payload to host memory, splitting at 4 KiB pages, answers
  with a 64-byte ACK, and prints the message ID at end of message.

Handler run times are fixed delays: none for ping-pong, 1500 cycles per SLMP segment.
File sizes are scaled down. The host DMA model moves 64 bytes per cycle. `nic_clk` has
the period of `clk` and runs a quarter period behind it. The round trip includes four clock crossings: RX in, host TX in
(for the echo-reply check), TX out and the host bus. Measured on this model, with a
memory that never waits:

| traffic | result |
|---|---|
| ping-pong, 64 B frame | 18 cycles from first request beat in to last reply beat out |
| ping-pong, 1464 B frame | 84 cycles (about 3 cycles per extra beat: ingress copy, egress read, stream out) |
| SLMP 125 KB, window 4 | 51,379 cycles |
| SLMP 125 KB, window 16 | 13,572 cycles |
| SLMP 400 KB, window 512 | 21,684 cycles; the 170 large slots run out and the receive port stalls, without loss |

ICMP and UDP give identical round trips, because checksums are not modelled in the
handler.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fpspin_top \
    -y rtl -y tb +libext+.sv rtl/fpspin_pkg.sv tb/tb_fpspin_top.sv -o sim --Mdir obj
./obj/sim
```

Replace `tb_fpspin_top` by any other testbench name. The end-to-end test takes about
15 seconds of wall time, the workload test about 3 seconds. The simulator has two states only, so every testbench
resets or initialises what it reads.

A few points the testbenches do not cover:

- they use behavioural models for the cluster and the DMA engine, not the real IP;
- the two end-to-end tests run `nic_clk` at the frequency of `clk`, a quarter period
  behind it, not at the prototype's ratio of 250 to 40 MHz. `tb_pspin_async_fifo` tests the
  crossing FIFO alone with a 25 ns and a 4 ns clock, in both directions. It checks:
  - order and data under random valid and ready;
  - capacity;
  - the latency of a crossing;
  - how long a freed entry takes to reach the writer;
- no test covers AXI error responses. Error responses are passed through without
  retry.
