# RMBoC: a circuit-switched multiple-bus network on chip

RMBoC (Reconfigurable Multiple Bus on Chip) connects a row of processing
elements (PEs) with a small number of parallel bus segments between each pair
of neighbours. It is built for devices where PEs are swapped in and out at run
time by partial reconfiguration. Two PEs that want to talk first set up a
private circuit out of free segments. After that, data moves from source to
destination as plain wires and multiplexers, with no packets, headers or
routing decisions on the data path. One word crosses the whole array in a
single clock cycle. Setting up and tearing down circuits is done by a small
command protocol that runs hop by hop through one controller per PE position.

This RTL implements the one-dimensional network in its measured
configuration: 4 PEs, 4 bus segments per neighbour gap and direction, and
16-bit segments. It also implements the crosspoint grid of the
two-dimensional extension (4 x 4 PEs, 32 crosspoints). Everything is
parameterised. The data path and the command logic are synthesizable
SystemVerilog.

## The array

```
   PE0          PE1          PE2          PE3
    |            |            |            |
 +------+     +------+     +------+     +------+
 | CP0  |=====| CP1  |=====| CP2  |=====| CP3  |
 +------+     +------+     +------+     +------+
        K x W rightward segments + K x W leftward segments
        one command link in each direction
```

Each PE hangs off one crosspoint (CP). Neighbouring crosspoints share:

* **K bus positions.** Each position is a pair of one-way W-bit wires, one
  for each direction. A circuit from a left PE to a right PE uses only
  rightward wires, and the reverse circuit uses only leftward wires. A
  channel from A to B and one from B to A are therefore independent.
* **A command link in each direction.** It carries one command word with a
  valid strobe into the neighbour's input FIFO.

The array is linear, not a ring. The outermost crosspoints tie their outer
segment inputs and command inputs to zero. A command sent past an end is
dropped. PE `i` has address `i`, counted from the left.

In the conceptual picture of the network, every gap has a column of small
switches, one per bus position, that connect the segments on either side or
tap them to the PE. Here all switches of one column are merged into one
crosspoint with a single controller. That lets the controller look at every
segment of the column at once and pick a free one in a single cycle.

## Inside a crosspoint

```
 from LEFT  --> [FIFO L] --\
 from RIGHT --> [FIFO R] ----> FIFO selector --> [main FIFO] --> controller --+--> to LEFT  (neighbour's FIFO R)
 from PE    --> [FIFO P] --/    (round robin                                   +--> to RIGHT (neighbour's FIFO L)
                                 L, R, PE)                                     +--> [PE out FIFO] --> PE
                                                        configuration store <--+
                                                               |
                                       segments in  --> data network --> segments out, PE rx
```

| module | role |
|---|---|
| `rmboc_fifo` | Command FIFO with a registered read port. `dout_valid` follows `rd_en` by one cycle. A write to a full FIFO is dropped and pulses `overflow`. |
| `rmboc_fifo_selector` | Moves one command every four cycles from the three input FIFOs to the main FIFO. It serves them round robin in the order LEFT, RIGHT, PE, starting after the last one served. |
| `rmboc_controller` | Executes one command every four cycles. It decides the direction, allocates, reuses or frees segments, and emits the resulting commands. |
| `rmboc_config_store` | The configuration table, one entry per segment end, all readable in parallel. |
| `rmboc_data_network` | Combinational multiplexers that build the circuits from the table. |
| `rmboc_crosspoint` | Wires the above together. |
| `rmboc_line` | A chain of crosspoints with given addresses. It is used by both networks. |
| `rmboc_1d` | The 1-D network (the top level). |
| `rmboc_2d` | The 2-D crosspoint grid. |
| `rmboc_pkg`, `rmboc_types.svh` | Command opcodes, port names, and the entry and command structs. |

The three input FIFOs are funnelled into one main FIFO so that only one
command processor is needed instead of three.

## Commands

The command word, MSB first, is `{op[2:0], src[AW-1:0], dst[AW-1:0], seg[SW-1:0]}`.
Here `AW = clog2(N)` and `SW = clog2(K)`, so the default word is 9 bits.

| op | code | travels towards | effect in each crosspoint it passes |
|---|---|---|---|
| REQUEST | 0 | dst | Forwarded only. Nothing is reserved, because the destination may still refuse. |
| REPLY | 1 | src | Allocates one segment (see below). |
| CANCEL | 2 | src | Forwarded only. |
| DESTROY | 3 | dst | Clears every table entry tagged (src, dst), then forwarded. |
| CONFIRM | 4 | src | Forwarded only. It acknowledges a DESTROY, so a source that never sees it can send DESTROY again. |

A command is delivered to the PE when the address it travels towards equals
the crosspoint's own address. Otherwise it goes left or right by comparing
the two addresses.

A channel is opened in these steps:

1. The source PE sends `REQUEST(src, dst)`.
2. The destination PE answers `REPLY(src, dst)` to accept or `CANCEL(src, dst)` to refuse.
3. The REPLY builds the circuit hop by hop on its way back. When the source
   PE receives it, the channel is complete and the source can start sending.
4. Data flows: the destination sets `pe_rx_src = src` and sees the source's
   `pe_tx_data` on `pe_rx_data` in the same cycle, with `pe_rx_valid` high.
5. The source closes the channel with `DESTROY(src, dst)`, and the
   destination answers `CONFIRM`.

## How a REPLY allocates segments

This is the core of the design.

**Ownership.** Every crosspoint owns the segments that *arrive* at it. It
owns the rightward segments coming from its left neighbour and the leftward
segments coming from its right neighbour. Only the owner marks such a
segment busy or free. No two crosspoints can therefore claim the same wire,
and no crosspoint needs to ask its neighbour about segment state.

**One hop.** A crosspoint that receives `REPLY(src, dst, seg)` does this:

* It works out two sides. The *from* side is the direction of src, which is
  where data will arrive from: LEFT, RIGHT or its own PE. The *to* side is
  the direction of dst: LEFT, RIGHT or PE.
* On the outgoing side, it records that outgoing segment `seg` towards the
  *to* side now carries this channel. That segment was chosen and reserved
  by the crosspoint before it on the REPLY's path. If the *to* side is the
  PE, it instead records an incoming entry ending at the PE.
* On the incoming side, if the *from* side is a neighbour, it picks the
  **highest-numbered free** incoming segment from that side. It marks the
  segment busy, tags it with (src, dst), and forwards the REPLY towards src
  with `seg` set to that index. If the *from* side is the PE, the outgoing
  segment is fed from `pe_tx_data`, and the REPLY is delivered to the PE.
* If an incoming segment from that side is already tagged with the same
  (src, dst), it is reused. This happens when the source repeated a REQUEST,
  for example after a timeout. A repeated request never ties up a second
  segment.
* If no incoming segment is free, the crosspoint writes nothing. It sends
  `DESTROY(src, dst)` towards dst, which frees every hop already built, and
  `CANCEL(src, dst)` towards src.

The segment index a channel uses can change at every crosspoint, because the
outgoing segment is a multiplexer fed by any incoming segment. Nothing moves
an existing channel to another segment later. There is no compaction.

**Capacity.** A rightward gap between positions j-1 and j is crossed by at
most `j*(N-j)` different (src, dst) channels. For N = 4 that is at most 4, so
with K = 4 a REPLY can never fail, even with all 12 channels open. The
failure path only shows up with fewer segments. The end-to-end testbench
uses K = 2 to exercise it.

**Data path.** For each outgoing segment, `rmboc_data_network` selects
either the PE transmit word or one incoming segment of the opposite side.
Unused outputs carry zero. The PE receive port searches the incoming entries
for a channel ending at the PE whose source equals `pe_rx_src`. A PE sends
one transmit word, which goes onto every channel it sources. The path is
combinational from `pe_tx_data` of the source to `pe_rx_data` of the
destination, through every crosspoint in between.

## Timing

A command spends 8 cycles in an idle crosspoint, from the write into its
input FIFO to the write into the next FIFO:

| cycles | step | block |
|---|---|---|
| 2 | read the input FIFO (select, capture) | FIFO selector |
| 2 | write the main FIFO | FIFO selector |
| 2 | read the main FIFO (read, capture) | controller |
| 2 | update the table and write the result (execute, output) | controller |

The selector and the controller each take 4 cycles per command and overlap
as a two-stage pipeline. Under load a crosspoint therefore finishes one
command every 4 cycles. A crosspoint that holds `c` queued commands clears
them in `(c-1)*4 + 4` cycles after the first reaches the controller.

The most commands that can be queued at one crosspoint at once is
`ceil((N^2+2N-4)/2)`, which is 10 for N = 4. The default FIFO depth of 16
holds that. A command that arrives at a full FIFO is lost, and the
`overflow` output pulses. Losing it is the network's defined behaviour, and
the sender is expected to retry.

A REQUEST from PE 0 to PE 3 crosses four crosspoints, so it takes 32 cycles
to show up at PE 3's output FIFO. Data on an established channel takes zero
cycles.

Reset is synchronous and active low. It empties every FIFO and the
configuration table.

## Two dimensions

`rmboc_2d` arranges N x N PEs in a grid. Every row and every column is a 1-D
line, so each PE has two crosspoints, one in its row and one in its column.
The default is 16 PEs and 32 crosspoints.

* Addresses are `{row, col}`.
* A row crosspoint compares only the column field, and a column crosspoint
  only the row field. A command on a line is therefore delivered to the PE
  whose column (or row) matches, and stops there.
* Turning a corner is the PE's job. The PE at the corner receives the
  command on one line and sends it again on the other. It also joins the two
  halves of the data path by copying its receive port on one line to its
  transmit port on the other.
* The preferred route goes up first, then left or right, and down only in
  the destination's column.

Choosing a line and turning are not part of this RTL. Ports for both
crosspoints of every PE are brought out (`row_*`, `col_*`, index
`r*N + c`). In `tb_rmboc_2d` the testbench plays the corner PEs.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N` | 4 | PEs in the line (2-D: grid side). |
| `K` | 4 | Bus positions per gap and direction. |
| `W` | 16 | Bits per segment. The measured configurations used 1, 8, 16 and 32 (1-D) and 8, 16 and 32 (2-D). |
| `DEPTH` | 16 | Depth of every command FIFO. |

`rmboc_crosspoint` and `rmboc_line` also take `ROUTE_LSB` and `ROUTE_W`. They
select the address field used for the left/right decision.

Other sizes that were evaluated fit by parameter alone:

* Segment count against width at a fixed total of 32 bits: 32x1, 16x2, 8x4,
  4x8 and 2x16.
* A video pipeline at 640x480 with a 25 MHz pixel clock. It needs 24 bits per
  pixel each way. On 16-bit segments that is two words per pixel, so the
  network must run at 50 MHz or more.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and finishes. Each
has a cycle watchdog that counts a failure if the test hangs. With Verilator
5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb \
    rtl/rmboc_pkg.sv tb/tb_rmboc_1d_full.sv --top-module tb_rmboc_1d_full -o sim
obj_dir/sim
```

| testbench | what it covers |
|---|---|
| `tb_rmboc_fifo`, `tb_rmboc_fifo_selector`, `tb_rmboc_config_store`, `tb_rmboc_data_network`, `tb_rmboc_controller`, `tb_rmboc_crosspoint` | Each block against an independent reference model, including the step timing and round-robin order. The crosspoint test also queues the worst case of 10 commands. They must leave one every 4 cycles, the last after 4 + 40 cycles. |
| `tb_rmboc_1d` | End to end with K = 2 and four behavioural PEs (`rmboc_pe_model`). Covers the 32-cycle latency, setup, data, rejection, allocation failure with CANCEL/DESTROY, reuse on repeated requests, teardown with CONFIRM, and FIFO overflow. Each mechanism is counted, and one that never happened is a failure. |
| `tb_rmboc_1d_full` | Default parameters. Opens all 12 channels, checks data on each, and tears them all down. |
| `tb_rmboc_tradeoff` | The five k x w = 32 configurations run side by side. |
| `tb_rmboc_vga` | Streams coordinates and colours for four 640-pixel lines between two PEs, two words per pixel each way. |
| `tb_rmboc_2d` | Two corner-turning routes across the 4 x 4 grid, data through the relays, and teardown. |

## Departures and open points

* **Segments are one-way pairs.** Each bus position is two one-way wires
  rather than one shared bidirectional wire driven through tri-state
  switches. Channel direction is fixed by where the source is, so the pair
  never conflicts, and the design needs no tri-states.
* **The configuration table is a register array, not block RAM.** On an
  FPGA the original keeps crosspoint state in block RAM so that it survives
  reconfiguration of a neighbouring PE. Here it is flip-flops, because the
  data network needs every entry in parallel. A flow that must keep the
  table through partial reconfiguration has to place it accordingly.
* **Bus macros are plain wires.** On an FPGA every signal between
  crosspoints passes through fixed-placement macros. Here they are ordinary
  connections.
* **These choices are not given by the original design** and were made here:
  the FIFO depth, the command encoding and width, the 4-cycle split of the
  selector and controller steps, what happens at the array ends, and the
  data-port behaviour of a PE that sources several channels.
* **CONFIRM is optional.** It is a fifth command that only travels back to
  the source. The protocol works without it.
* **Not built:**
  * The PE.
  * In 2-D, the PE logic that chooses a line and relays across lines.
  * A timeout or retry policy in the PE.

  The testbenches contain behavioural PEs for the parts they need.
