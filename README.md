# Four-port store-and-forward Ethernet switch

This is synthesizable SystemVerilog for a small layer-2 Ethernet switch. It has
four GMII ports (1 Gb/s each), learns MAC addresses, and forwards whole frames
after they have been received and checked. The design follows the architecture
of the paper "L2 Ethernet Switch VLSI Implementation". This RTL is an
independent implementation of that architecture, not the authors' code. Where
the paper leaves a detail open, this code makes its own choice, and the section
"Departures and own choices" lists them.

The main idea is simple. Frame bytes are written once into one shared
memory and never move again. Everything else passes around 6-bit block
pointers:

- the crossbar routes a frame by pushing its first block's index into a
  per-port queue;
- the egress side walks the frame's block chain to send it;
- the egress side returns each block to a free list as it goes.

```
 GMII RX 0..3 ──► RX MAC ──► write ctrl ──┐               ┌──► read ctrl ──► TX MAC ──► GMII TX 0..3
   (125 MHz)     (per port)  (per port)   │               │    (per port)   (per port)    (switch_clk/4)
                                          ▼               │
                               ┌──── arbiter (round robin per resource) ────┐
                               │ SRAM write │ alloc │ SRAM read │ free │ evt │
                               └─────┬──────────┬────────┬────────┬────┬───┘
                                     ▼          ▼        ▲        ▼    ▼
                                 64 x 64 B SRAM    free list (stack +   crossbar: learn table
                                                   flood ref counters)  + router ──► VOQ 0..3
```

## Clocks and reset

| Domain | Frequency | Logic |
|---|---|---|
| `gmii_rx_clk_i[p]` | 125 MHz, one clock per port | only the write side of each RX FIFO |
| `switch_clk` | 500 MHz, four times the GMII rate | everything else |
| `gmii_tx_clk_o[p]` | `switch_clk` / 4, made inside the TX MAC | the read side of each TX FIFO and the GMII TX flops |

- Dual-clock FIFOs with Gray-coded pointers carry data between the domains.
- RX_DV and RX_ER cross through two-flop synchronizers.
- Each domain has a reset synchronizer. Reset asserts asynchronously and is
  released after two clock edges of that domain.
- `switch_rst_n` is active low.

The 4:1 clock ratio is the key timing fact of the design. A port delivers at
most one byte every four switch cycles. So four ports together need the
shared SRAM write port for at most one 64-byte block per cycle, and only
rarely.

## Frame storage: blocks, footers and the two-slot allocation

The packet memory holds 64 blocks of 64 bytes (4 KB). Each block stores 63
frame bytes and a one-byte footer:

```
bit 511 ........................................ 8 | 7 ......... 2 | 1   | 0
 payload byte 0 | byte 1 | ... | byte 62           | next_idx[5:0] | eop | rsvd
```

- In a block that is not the last one, `next_idx` points to the frame's next
  block. The blocks of a frame form a linked list and need not be contiguous.
- In the last block (`eop = 1`), `next_idx` holds the number of valid bytes in
  that block, 0 to 63. The original footer has no length field. This design
  reuses the next-index bits, which are otherwise unused in the last block.
- The stored frame runs from the destination address through the FCS. The
  preamble and SFD are not stored.
- A frame whose length is a multiple of 63 ends in an extra last block that
  holds 0 bytes.

### Two-slot allocation

The write controller (`mem_write_ctrl`) has a problem to solve: it must write a
block's footer, which needs the next block's index, as soon as the block is
full. It therefore always holds two allocations from the free list, one for the
current block and one for the next. It asks for a new block whenever one slot
is empty, also between frames. The spare block left over when a frame ends
becomes the first block of the next frame. As a result, two blocks per port are
always held by the write controllers.

### States

| State | What happens |
|---|---|
| `IDLE` | Wait for the first byte of a frame. |
| `WRITE_PAYLOAD` | Shift bytes into a 504-bit register. |
| `WAIT` | A needed block has not been allocated yet. |
| `FOOTER` | Ask the arbiter for the SRAM write port and write the block. |

### Back-pressure

The RX MAC offers each byte in the cycle it leaves its FIFO. The write
controller's ready signal in that same cycle decides whether the byte is taken.
Ready is low in `WAIT`, and in `FOOTER` until the write is granted.

A byte that is refused is lost. The RX MAC then marks the frame as bad. Bytes
arrive every fourth cycle, so a full block has four cycles to be written. The
round-robin write arbiter serves each of the four ports within four cycles, so
bytes are only lost when the memory runs out of free blocks.

### Deadlock escape

When the memory is full, every port can sit in `WAIT` holding part of a frame,
and no block will ever be freed. To avoid this, a frame that ends while its
port is still in `WAIT` is closed in the block it already holds, as an errored
frame. That frame is then freed like any other errored frame (see below).

### End of frame

When the last block is written, the controller reports three things to its
port's event register:

- the frame's first block,
- the error flag,
- the destination and source addresses.

The event register holds them until the arbiter passes the event to the
crossbar.

## Receive MAC

`rx_mac_control` does all of its parsing in the switch domain.

**Finding the frame.**
- While idle, it counts consecutive `0x55` bytes.
- `0xD5` after at least seven of them starts a frame.
- Byte positions count the preamble as 0–6 and the SFD as 7. The destination
  address is bytes 8–13 and the source address is bytes 14–19.

**CRC check.**
- The CRC-32 runs over every byte except the last four.
- A four-byte delay buffer holds the newest bytes. Each byte leaving the buffer
  updates the CRC.
- When the frame ends, the buffer holds the received FCS. It must equal the
  complemented CRC, byte-reflected as Ethernet sends it.
- The frame ends when the synchronized RX_DV is low and the FIFO has stayed
  empty.

**Errors.** The error flag is raised by any of:
- an FCS mismatch,
- RX_ER during the frame,
- a frame shorter than 64 bytes,
- a byte dropped under back-pressure.

End-of-frame and error are held until the next frame starts. If the very first
byte of a frame cannot be delivered, the whole frame is ignored.

## Free list and flooded frames

`free_list` is a stack of free block indices.

**Allocation.**
- After reset the stack holds 0..63 with the pointer at 64, so blocks are
  handed out as 63, 62, 61, and so on.
- One allocation and one free can happen in the same cycle.
- On an empty stack, a block freed in a cycle goes straight to an allocation
  request in that cycle.

**Freeing flooded frames.** A flooded frame is read by all four egress ports,
and each of them frees every block it reads. Each block therefore has a small
counter of flood frees. The block returns to the stack only on the fourth such
free, whatever order the ports read in. A plain free returns the block at once.

## Arbitration

`arbiter` has five round-robin arbiters (`rr_arbiter`), one per shared
resource:

| Resource | Requesters |
|---|---|
| SRAM write port | write controllers |
| Free-list allocation | write controllers. The round-robin pointer moves only when a block was actually handed out, so a port waiting on an empty list keeps its turn. |
| SRAM read port | read controllers. Read data returns one cycle after the grant and is steered to the port granted in the previous cycle. |
| Free-list free port | read controllers |
| Crossbar | ingress event registers |

All grants are combinational, in the cycle of the request.

## Learning and routing (crossbar)

The crossbar (`crossbar`) takes one frame event per cycle.

### Address table

The destination address is looked up in `address_table`: 16 fully associative
rows of {MAC, port, 2-bit hit counter}.

**Lookup.** The answer comes one cycle later.

**Hit counters.**
- A hit adds one to that row's counter and subtracts one from every other row.
- Counters saturate at 0 and 3.
- Rows that are not being used drift down to 0.

**Learning.** The source address is learned in the same cycle, but only for
frames without errors.
- A known address has its port updated.
- A new address takes the lowest empty row.
- When the table is full, the new address replaces the row with the smallest
  counter. Ties go to the highest index.
- A new row starts with counter 1.

The lookup sees the table as it was before that cycle's learning.

### Router

One cycle after the event, the router (`translator`) pushes one 8-bit entry
`{drop, flood, block}` into the virtual output queues:

| Case | Push |
|---|---|
| Destination known | Into that port's VOQ. |
| Destination unknown | Into all four VOQs with the flood tag. The ingress port is included. |
| Frame has an error | Into its own ingress port's VOQ with the drop tag. That egress port walks and frees the frame's blocks without sending anything. This is how bad frames give their memory back. |

## Egress: queue, read controller, TX MAC

**Queue.** Each `egress_port` is a `voq` feeding a `tx_mac_control`.
- The VOQ is 64 entries deep, one per memory block, so in normal operation it
  cannot overflow.
- A push into an empty queue is visible in the same cycle (bypass).
- A full queue accepts a push when it is popped in the same cycle.
- A push that is still lost is reported on `voq_drop_o`.

**Starting a frame.** The TX MAC takes an entry and starts the port's
`mem_read_ctrl`. The read controller:
- requests each block through the arbiter,
- holds it for the TX MAC,
- frees it, with the flood tag if the frame was flooded, once TX has taken it,
- follows the footer to the next block, until the last block.

**Sending.** The TX MAC does not send the preamble until the first block is in
hand. It then queues, into a 16-entry FIFO to the GMII clock:
- 7 × `0x55` and `0xD5`,
- the frame bytes, fetching the next block while the current one is being
  sent,
- 12 idle entries as the inter-frame gap.

If that FIFO ever runs dry inside a frame, TX_ER is raised so the receiver
discards the frame.

## Timing at a glance

| Event | Latency |
|---|---|
| RX byte to switch domain | 2–3 switch cycles (FIFO pointer synchronization) |
| Block write | 1 cycle after the write grant, granted within 4 cycles |
| Table lookup to VOQ push | 1 cycle |
| SRAM read | 1 cycle after the read grant |
| Frame forwarding | store-and-forward: a frame leaves only after its last byte is written and its FCS checked |

## Departures and own choices

The architecture, block format, free-list scheme, table replacement policy,
flood behaviour and VOQ bypass follow the paper. The following are this
design's own decisions or readings of unclear points.

**Reading of unclear points in the paper.**
- **Field offsets.** The paper gives the header positions as "8–13, 14–20,
  20–22", which overlap. This design uses the Ethernet layout:
  destination 8–13, source 14–19, type 20–21.
- **Flood targets.** The paper says both "to all egress ports" and "to every
  other port". Floods here include the ingress port.
- **Allocation priority.** The paper says allocation requests are always
  granted, so no port starves. Here they are round-robin like the other
  resources: one block per cycle, granted whenever the free list has one.

**Added behaviour.**
- **Byte count in the last block's footer.** This was added so that frames of
  any length can be sent back exactly.
- **Errored frames.** They are queued with a drop tag to reclaim their blocks.
  The paper only says they do not appear on the TX side.
- **Deadlock escape in `WAIT`** (see above). It is not discussed in the paper.
- **Runt and RX_ER checks** set the frame error, besides the CRC check.
- **Same-cycle bypass in the free list** when the stack is empty.

**Own interface and sizing choices.**
- **RX byte hand-over** is valid/ready in one cycle, which gives the write
  controller four cycles per block.
- **TX clock.** The TX clock is produced inside as `switch_clk/4`, because the
  top-level port list has no TX clock input.
- **Handshakes and sizes.** The read-controller/TX handshake, the one-block TX
  prefetch, the IFG insertion, TX_ER on underrun, FIFO depths of 16 and VOQ
  depth of 64 are all this design's choices.

**Left out.**
- **Address table access.** The paper mentions egress ports contending for the
  address table. Here only ingress frame events use it.
- **RX power saving.** The RX power-saving freeze is not modelled as clock
  gating. Its visible effect, dropping bytes while the grant is low, is.

## Limits

- **Sustained load.** Frames are stored whole, and 64 blocks hold about 4 KB.
  Four 1518-byte frames arriving at the same moment need 100 blocks, so some
  of them are lost: their bytes are dropped, the frames are marked bad and
  then discarded. A single maximum-size frame needs 25 blocks.
- **VOQ drops.** A flooded frame that one VOQ fails to accept would never have
  its blocks freed. With a depth of 64 this cannot happen in this
  configuration.
- **Physical timing.** The SRAM is written as a register array (about 33 K flip-flops
  of the roughly 47 K-bit state). No timing closure at 500 MHz is claimed.
- **PHY.** The GMII PHYs are outside the chip. Testbenches drive the GMII
  pins directly.

## Files

| File | Contents |
|---|---|
| `rtl/switch_pkg.sv` | constants, footer and VOQ entry types, CRC-32 byte update |
| `rtl/eth_switch.sv` | top level |
| `rtl/ingress_port.sv` | `rx_mac_control` + `mem_write_ctrl` + event register |
| `rtl/egress_port.sv` | `voq` + `tx_mac_control` |
| `rtl/mem_read_ctrl.sv` | block-chain reader and freer, one per port |
| `rtl/arbiter.sv`, `rtl/rr_arbiter.sv` | shared-resource arbitration |
| `rtl/sram.sv`, `rtl/free_list.sv` | packet memory and block allocator |
| `rtl/crossbar.sv`, `rtl/address_table.sv`, `rtl/translator.sv` | learning and routing |
| `rtl/async_fifo.sv`, `rtl/sync_2ff.sv`, `rtl/reset_sync.sv` | clock-domain crossing |
| `tb/tb_<module>.sv` | self-checking testbench for each module |
| `tb/tb_eth_pkg.sv` | frame builder and an independent bit-serial CRC-32 |

Each file starts with a comment on its function, interface and timing.

## Simulation

Each testbench is self-checking. It ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/switch_pkg.sv tb/tb_eth_pkg.sv tb/tb_eth_switch.sv \
    --top-module tb_eth_switch -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace `eth_switch` with any module name to run that module's test.
`tb_eth_pkg.sv` is only needed by the testbenches that send Ethernet frames.

`tb_eth_switch` runs the full-size switch with no parameter changes. It uses a
reference model of the learning table and checks every frame byte received on
every port. It covers:

- frames from all four ports at once to unknown destinations, which are
  flooded;
- the same ports again to learned destinations, which are routed to one port;
- table eviction after more than 16 source addresses;
- frames with bad FCS and with RX_ER, which are dropped and their blocks
  freed;
- sustained 700-byte floods on all ports that exhaust the memory and trigger
  back-pressure byte drops, `WAIT` stalls and same-cycle allocate/free;
- a second reset, after which the table is empty again and the first frames
  flood once more.

The testbench counts each of these events and fails if one never happened.
After each phase it waits for the switch to drain. It then checks that all
blocks are back in the free list, except the two each write controller keeps. It simulates
about 134 µs and finishes in well under a second.

The module testbenches compare against independent reference models:

- a reference queue for the VOQ;
- a block multiset for the free list;
- a reference round-robin for the arbiter;
- a reference table for the address table and crossbar;
- a block-chain walker for the write and read controllers;
- a GMII monitor for the TX MAC and egress port.
