# A push-memory CGRA for statically scheduled image and DNN pipelines

This is synthesizable SystemVerilog for a coarse-grained reconfigurable array (CGRA) whose memories
*push* data to the compute elements on a fixed schedule. Nobody requests the data. An image-processing
or DNN pipeline is compiled to a static schedule: every write into a buffer and every read out of it
happens at a cycle known at compile time. So each memory port does not need a request/response
interface. It runs a small controller that knows three things:

* **which iteration** of a loop nest it is on (the *iteration domain*),
* **which address** that iteration touches (an affine *access map*),
* **at which cycle** the access must happen (an affine *schedule*).

A memory with such controllers on its ports is a *unified buffer*. One physical instance, built from
a wide single-port SRAM, is the memory (MEM) tile of the CGRA. The rest of the design is built around
that tile:

* an array of processing elements (PEs) and MEM tiles with an island-style routing network;
* a large double-buffered global buffer that feeds data tiles into the array and collects results;
* a sequencer that runs the array over one data tile while the next one is loaded, and stalls the
  whole array if the next tile is late.

Everything runs from one cycle counter (`cycle`). It restarts at 0 at the beginning of every data
tile. No block has a valid/ready handshake. A block does its work in a cycle because its schedule
says so.

## 1. Port controllers: loop nests as recurrences

All port controllers (`port_ctrl`) are made from the same three pieces. Unused loop levels have
extent 1. The number of levels is `MAX_DIMS = 6`, with 16-bit counters.

**`iteration_domain`** holds one counter per loop level, innermost first. Each cycle it tells which
level the next step increments. That level, `level`, is the lowest level that has not reached its
last value. On a step:
* that counter increments;
* every counter below it returns to 0;
* after the very last iteration, `done` rises and the domain stops.

**`address_gen`** evaluates an affine expression of the counters without a multiplier. Suppose the
address is `offset + Σ s_i·i_i`, where the loop at level i has range `r_i` and stride `s_i`. A step
that increments level `L` changes the address by a constant:

```
delta[L] = s_L − Σ_{i<L} s_i·(r_i − 1)
```

The hardware is therefore one register, one adder and a mux that selects `delta[level]`, plus a
constant offset at the output. Example with ranges (4,4) and strides (2,16): the deltas are (2,10),
and the address runs 0,2,4,6,16,18,…

**`schedule_gen`** is the same recurrence computed on time instead of addresses. Its output, the
cycle of the next access, is compared with `cycle`. The port fires (`en`) when the two are equal,
the port is enabled, the domain is not done and the array is not stalled. Firing steps the
iteration domain, which moves both the address and the schedule to the next iteration.

A port whose timing is fully decided by another port has no schedule generator. It steps on an
external pulse (`port_ctrl` with `USE_SG=0`). The memory tile uses this twice (section 2).

Every controller is configured by a `port_cfg_t`:
* `enable`;
* the number of loop levels and their extents;
* the address deltas and offset;
* the schedule deltas and offset.

The testbench package has a helper, `make_port`, that turns ranges and strides into deltas.

## 2. The memory tile (`mem_tile`)

The tile has 2 input ports and 2 output ports of 16 bits. It stores data in a single-port SRAM of
512 × 64 bits, so each access moves four 16-bit words, one *vector*. One single-port SRAM with four
words per access is cheaper than a dual-port SRAM of 2048 × 16 with the same bandwidth. The price is
that each access handles a vector rather than a word. Small register files turn the word streams
into vector streams and back:

```
 data_in[p] ─► AGG p (8 words) ─┐ ENC/OR          ┌─► TB 0 (8 words) ─► out mux ─► data_out[0]
                                ├────► SRAM ─► REG ┤
 data_in[q] ─► AGG q (8 words) ─┘ 512 x 64 SP     └─► TB 1 (8 words) ─► out mux ─► data_out[1]
                                                                          ▲
                                                   chain_in[i] ───────────┘
```

**Aggregator (AGG).** Each aggregator is serial-to-parallel:
* Its write port (ID/AG/SG) stores one word of the input stream per scheduled cycle.
* Its read port (ID/AG/SG) presents a whole vector on the cycles the compiler chose for the SRAM write.

**SRAM write side.** The two aggregators' read schedules are shared.
* Their enables are ORed into the SRAM write enable.
* An encoder picks the aggregator whose vector is written.
* The SRAM write address comes from one iteration domain and address generator. It has no schedule
  of its own and steps whenever either aggregator is read.

This means a tile needs only one write address generator however many input ports it has.

**SRAM read side.** The read port has a full ID/AG/SG. The read vector appears one cycle later.
* A register delays the read strobe by one cycle to match, so the vector is written into a
  transpose buffer in the cycle after the read.
* A second address generator, on the read iteration domain, decides which transpose buffer receives
  it. For the common pattern (alternating ports) its deltas are (+1, −1, −1, …).

**Transpose buffer (TB).** Each transpose buffer is parallel-to-serial.
* Its write port has no schedule and steps on each delivered vector.
* Its read port (ID/AG/SG) is the tile output port. It emits one word per scheduled cycle, and
  `out_valid` marks those cycles.

**Reads and writes must not collide.** The compiler must never schedule a write and a read in the
same cycle. An assertion in `mem_tile` checks this. If both do happen, the write wins.

### Timing of one memory tile

Take a one-row line delay: the words of row y come in at cycles `64y + x`, and the same words must
leave 67 cycles later. The tile's schedules are:

| event | schedule (vector `xo = x/4`, word `xi = x%4`) |
|---|---|
| word written into AGG | `64y + 4xo + xi` |
| AGG → SRAM write | `64y + 4xo + 4` (after the fourth word) |
| SRAM read | `64y + 4xo + 65` |
| vector in TB | one cycle after the read |
| word out of TB | `64y + 4xo + xi + 67` |

Two single-port rules apply to these numbers:
* SRAM writes and reads must land on different cycles. Here writes fall on even cycles and reads on
  odd ones.
* Each aggregator and transpose buffer holds two vectors, so one vector can fill while the other
  drains.

### Chaining

A buffer larger than 512 vectors uses several tiles in a column. Together they form one logical
address space:

* The logical address is `{TileID, physical address}`, with the low 9 bits physical.
* Each tile's `cfg.tile_id` says which range it owns. All chained tiles run the same schedules on
  the same streams, but only the tile whose TileID matches really writes or reads its SRAM.
* Each transpose-buffer slot carries an *own* bit: whether the vector came from a matching read.
  The output mux drives the tile's own word if the bit is set, and otherwise the neighbour's output
  on `chain_in`.
* In the array, `chain_out` of the memory tile in row r+1 feeds `chain_in` of the tile in row r.
  The tile at the top of a chain therefore presents the output of the whole chain.

The own bit travels with the vector. The output mux can therefore decide without knowing the
TileID at output time, even though the SRAM read happened a cycle and several words earlier.

## 3. The array (`cgra`, `cgra_tile`, `pe`, `switch_box`, `connection_box`)

The array has 16 rows × 32 columns of tiles. Every fourth column (`c % 4 == 3`) holds memory tiles,
which gives 384 PE tiles and 128 MEM tiles.

**Routing networks.** Each tile has a 16-bit and a 1-bit routing network with `NUM_TRACKS = 5`
tracks per side.
* **Switch box.** It drives each outgoing track from one of:
  * the same-numbered track of one of the other three sides;
  * a core output.

  Its select code `k` has these meanings, for output side `s`:

  | `k` | drives the output from |
  |---|---|
  | 0, 1, 2 | the incoming track of side `(s+1+k) % 4`, with sides N=0, E=1, S=2, W=3 |
  | 3, 4 | core output `k−3` |

  Every switch-box output is registered, so each hop costs exactly one cycle. The registers hold
  their value during a stall.
* **Connection box.** It picks a core input from any of the 20 incoming tracks, with code
  `side·5 + track`. It is combinational.

**PE.** It has two 16-bit operands, each of which can be:
* the routed input;
* the routed input delayed by one register;
* a configured constant.

The operation is one of add, sub, mul (low and high half), absolute difference, min, max, the three
shifts, and, or, xor, select, or pass.

The PE also has three 1-bit inputs. Its 1-bit output is either:
* a comparison of the operands (eq, ne, lt, le, gt, ge, signed or unsigned);
* an 8-entry look-up table of the three 1-bit inputs.

The 1-bit `bit_in[0]` drives the select operation.

**Memory tile in the array.** Its two 16-bit inputs come from connection boxes. Its two outputs
are core outputs 0 and 1 of the 16-bit switch box. It only passes the 1-bit tracks through.

**Edges.** The global buffer connects on the north edge:
* `io_in[c]` enters tile (0,c) on north track 0;
* `io_out[c]` is that tile's north output on track 0.

Other edge inputs are 0.

**Configuration.** Configuration is written over a broadcast bus (`cfg_bus_t`):
* `tile` is the tile index `row·32 + col`;
* `word` is the 32-bit word number;
* `data` is the word.

Each tile keeps its whole configuration (`pe_tile_cfg_t` or `mem_tile_cfg_t`) as one packed struct.
Word k sets bits [32k+31 : 32k]. Global-buffer bank b answers to tile index 768 + b. Reset clears
all configuration, so an unconfigured tile outputs zeros and has every port disabled.

## 4. Global buffer and tile sequencing

**Global buffer (`global_buffer`).** It has 16 banks × 128 K words × 16 bits = 4 MB, and each bank
is split into two halves.
* Bank b has one load stream and one store stream, each a full port controller:
  * the load stream feeds column `2b`: a word loaded at cycle t appears on `io_in[2b]` in cycle t+1;
  * the store stream takes column `2b+1`: a word stored at cycle t is the value on `io_out[2b+1]`
    in that cycle.
* The streams use the active half. The host port (`{bank, half, word}` address, read data one cycle
  later) uses the other half at the same time.
* Host accesses to the half being streamed are ignored. Between runs the host may use both halves.

**Sequencer (`accel_ctrl`).** It runs `num_tiles` data tiles of `run_cycles` cycles each,
alternating halves:
* The host pulses `half_ready_set[h]` when half h holds a complete tile.
* If the next half is not ready when a run ends, the sequencer waits. During the wait the whole
  array is stalled: every counter, schedule and routing register holds.
* Leaving the wait, it pulses `clear` to restart every port controller, and `cycle` starts again at
  0.
* At the end of a run, the half is released and the other half becomes active.
* `stall_cycles` counts the cycles lost to late tiles.

Stalling the whole array at once keeps it deterministic. The cycle-exact schedules inside the array
never see a stall: it only stretches time between the tiles.

**`accel_top`** connects the three parts. The SoC around it is not built: the processor, caches,
DMA, interconnect and the off-chip link. Their side of the global buffer is the host port.

## 5. Worked example: brighten and blur

`tb_accel_top` runs a two-stage pipeline on the full-size design. First it brightens the image,
`b = 2·in`. Then it applies a 2×2 box blur, `o = (b(x,y)+b(x+1,y)+b(x,y+1)+b(x+1,y+1)) >> 2`.

| where | what | value leaves at |
|---|---|---|
| GLB bank 0 | pixel n = 64y+x loaded | `io_in[0]` at n+1 |
| PE (0,0) | `b = in·2` → south | n+2 |
| PE (1,0) | `h(n) = b(n) + b(n−1)` (second operand from the input register) → east | n+3 |
| tiles (1,1), (1,2) | route east; (1,2) also turns a copy south | n+5 at (1,3) and at (2,2) |
| MEM (1,3) + MEM (2,3) | 64-word delay of h, vectors at SRAM addresses 504…519: 504…511 in TileID 0 and 512…519 in TileID 1 | `h(n−64)` at (2,2) east input at n+5 |
| PE (2,2) | `h(n) + h(n−64)` → south | n+6 |
| PE (3,2) | `>> 2` → west, then north through column 1 | `io_out[1]` at n+11 |
| GLB bank 0 | store o(x,y) at cycle 64y+x+76 | address 4096 + 63y + x |

The line delay is split across two chained memory tiles on purpose. Half of its vectors sit in each
tile, so every output row passes words through the chain.

The testbench processes two images as two data tiles. It writes the second image into the other
half during the first run, but declares it ready 50 cycles late, which forces a stall. It checks:
* every word on `io_out[1]` at its exact cycle;
* every stored result.

It also counts stall cycles, chained output words, SRAM vector writes and reads, steps of the
shared write port, and host accesses during runs. Each of these must be non-zero.

## 6. Simulating

Every testbench is self-checking. It ends by printing `TB_RESULT checks=N failures=M` and has a
watchdog. Build one with verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ub_pkg.sv tb/ub_tb_pkg.sv \
    rtl/*.sv tb/tb_mem_tile.sv --top-module tb_mem_tile -Mdir obj -o sim && obj/sim
```

| testbench | what it exercises |
|---|---|
| `tb_iteration_domain`, `tb_address_gen`, `tb_schedule_gen` | random loop nests against a software model; the ranges (4,4), strides (2,16) example; stalls |
| `tb_sram_sp`, `tb_aggregator`, `tb_transpose_buffer` | the wide SRAM and the register files with shared schedules |
| `tb_mem_tile` | two chained tiles as a two-port line buffer, checking every output's value and cycle |
| `tb_pe`, `tb_switch_box`, `tb_connection_box` | operations, operand modes, LUT and compare; routing codes; stall hold |
| `tb_cgra` | a 2 × 4 array configured over the bus, on the 16-bit and 1-bit networks |
| `tb_global_buffer` | streams and host traffic on opposite halves at the same time |
| `tb_accel_ctrl` | tile sequencing with randomly late tiles |
| `tb_accel_top` | section 5, at the full default size; about 2 minutes to compile and 15 s to run |

The full array is large for synthesis tools: about 500 K configuration bits and 4 MB of
global-buffer memory. Expect long elaboration times.

## 7. Capacity against the evaluated applications

The built array has 384 PEs, 128 MEM tiles and 262,144 SRAM words. The table compares it with the
applications the design was evaluated on. The PE and MEM counts are the published compiler results
for those applications, and the SRAM words are the buffer sizes after schedule optimization.

| application | PEs | MEMs | SRAM words | fits |
|---|---|---|---|---|
| gaussian | 19 | 1 | 128 | yes |
| harris | 83 | 5 | 640 | yes |
| upsample | 0 | 1 | 67 | yes |
| unsharp | 56 | 6 | 834 | yes |
| camera | 397 | 8 | 518 | **no**: it needs 13 more PEs |
| resnet layer | 128 | 81 | 14048 | yes |
| mobilenet layer | 114 | 7 | 1240 | yes |

Of the six Harris schedules, only "recompute all" (769 PEs) does not fit.

The split between PE and MEM tiles (one column in four) is a choice of this implementation. A
different ratio changes these answers for the memory-heavy resnet layer and for camera.

## 8. What follows the reference architecture and what is this design's own

**Taken from the reference architecture:**
* the port controller made of iteration domain, recurrence address generator and schedule
  generator;
* the 4-wide single-port 512 × 64 SRAM with aggregators and transpose buffers of a few vectors;
* shared scheduling on the SRAM write side and a one-cycle register on the read side;
* chaining by TileID with an output mux;
* the 16 × 32 array of 16-bit PEs and MEM tiles with island-style routing;
* the PE's two input registers, 1-bit inputs, compare and LUT;
* the 4 MB double-buffered global buffer;
* stalling the whole array when a data tile is late.

**Chosen here:**
* every bit width not stated: 16-bit address and time, 6 loop levels, a 7-bit TileID;
* the PE instruction set, operand modes and LUT size;
* the routing: 5 tracks, track-preserving switch boxes, registered hops, full connection boxes;
* the MEM-column ratio;
* the configuration bus and its word layout;
* the TB-select address generator and the own bit;
* the bank count, the half split, the column assignment and the host port of the global buffer;
* the sequencer's state machine and ready flags;
* all reset behaviour: asynchronous active-low for control state, no reset for storage arrays.

Verilator reports `rst_n` as used both asynchronously and synchronously (SYNCASYNCNET). The
synchronous use is only the `disable iff` of the memory-tile assertions. The storage arrays, which
are not reset, are never read before they are written under a valid schedule.
