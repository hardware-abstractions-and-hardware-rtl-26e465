# A CGRA that several tasks can share at once

A coarse-grained reconfigurable array (CGRA) is usually handed to one task
at a time: the whole tile array and the whole global buffer belong to the
kernel that is currently mapped, and the next kernel waits. This RTL
implements a CGRA whose two main resources are cut into uniform pieces that
a run-time scheduler can hand out separately:

* **GLB-slices**: each of the 32 banks of the global buffer (GLB), 128 KB
  apiece, is one slice of memory capacity and memory bandwidth;
* **array-slices**: each group of four adjacent tile columns (48 PE tiles and
  16 MEM tiles in the 16-row array) is one slice of compute.

A task runs in an *execution region*: a contiguous run of GLB-slices plus a
contiguous run of array-slices, in any ratio. A memory-hungry layer can take
20 GLB-slices and 2 array-slices, a compute-hungry one 2 GLB-slices and 6
array-slices, and both can run side by side. These are called
flexible-shape regions. Two hardware mechanisms make them practical:

1. **Fast dynamic partial reconfiguration (DPR).** Bitstreams are stored in
   the GLB. Each bank can stream one bitstream into one array-slice at one
   configuration write per cycle. Banks work in parallel, and the other
   array-slices keep computing meanwhile.
2. **Bitstream relocation.** A bitstream is compiled once, as if its task sat
   in the leftmost array-slices. Each bank has a *destination* register. As
   the bitstream leaves the bank, its column addresses are rewritten to land
   in the slice that register names. Moving a task to another free slice
   takes one register write, with no recompilation.

The architecture follows the multi-task CGRA of Kong, Koul, Raina, Horowitz
and Torng ("Hardware Abstractions and Hardware Mechanisms to Support
Multi-Task Execution on Coarse-Grained Reconfigurable Arrays"). That CGRA is
in turn built on the Amber SoC's CGRA. The source describes the slices,
regions and mechanisms, but not the circuits inside the blocks. Every
encoding, register map, handshake and the inside of every block here were
therefore chosen for this implementation. The section "What is given and
what is chosen" lists these choices.

## Sizes

| Item | Value | Origin |
|---|---|---|
| Tile array | 32 columns x 16 rows = 512 tiles | source |
| PE / MEM tiles | 384 / 128; every fourth column is MEM | source (counts), drawing (pattern) |
| Array-slices | 8, of 4 columns each | source |
| Routing tracks | 5 in and 5 out per side of every tile | source |
| GLB | 32 banks x 128 KB (16384 words of 64 bits) | source (size), chosen (word) |
| Data word | 16 bits plus a valid bit | chosen |
| MEM tile scratchpad | 512 x 16 bits | chosen |
| Configuration word | 32-bit address, 32-bit data | chosen |

All of these are parameters of `cgra_pkg` and of the modules. The defaults are
the full-size chip.

## Module tree

```
cgra_top
├── glb                      host-bus decode, 32 x
│   └── glb_bank             load / store / DPR engines, registers
│       └── glb_sram         16384 x 64 storage
├── glb_array_network        bank <-> slice routing of data lanes and bitstreams
└── tile_array               8 x
    └── array_slice          4 columns x 16 rows, plus 4 IO tiles
        ├── io_tile          GLB lane <-> top tile of a column
        └── tile             (IS_MEM selects the core)
            ├── connection_box x3
            ├── pe_core | mem_core
            └── switch_box
```

`cgra_pkg` holds the sizes, the word and bus structs, the opcodes and the
register indices.

## The data path

Every routing track carries a `word_t`: 16 data bits and a valid bit. The
array is statically scheduled. Nothing stalls and nothing pushes back. A
word simply moves one switch box per clock cycle. A core fires in a cycle in
which all of the operands it uses are valid, and its result appears, valid,
one cycle later. So operand paths have to be balanced in length, which is a
job for the compiler.

**Tile.** A tile has three connection boxes, one core and one switch box.
Each connection box picks one of the 20 incoming tracks (4 sides x 5) as a
core operand: a, b or c. The switch box drives each of the 20 outgoing
tracks from any incoming track, or from the core output, or leaves it
unconnected. Every switch-box output is registered. Whatever the
configuration, the mesh therefore has no combinational loop, and a hop
costs exactly one cycle.

**PE core.** Its opcodes are pass, add, sub, mul, min, max, shifts, and/or/xor
and abs, plus two multiply-accumulate forms:

* `PE_MAC` computes a*b + c;
* `PE_ACC` adds a*b into an accumulator, emits the sum on every `count`-th
  input, then clears it.

Bit 4 of the opcode register replaces b by a 16-bit constant.

**MEM core.** It has three modes over a 512-word array:

* a line buffer that returns each input `count` valid words later, as
  stencil kernels need;
* a lookup table indexed by a, filled through configuration writes;
* a plain RAM: write a at b when c is valid, otherwise read at b.

**IO tiles.** There is one IO tile per column, above the top row. It drives
the column's 16-bit GLB lane onto a chosen set of the top tile's north
input tracks. It also returns one chosen north output track to the GLB.
Both directions are registered.

**Lanes and banks.** A GLB word is 64 bits, which is four 16-bit lanes: one
per column of an array-slice. A bank's load engine reads one word per cycle
and presents its four lanes. Its store engine writes a word whenever every
lane in its `ST_MASK` is valid.

## Configuration, DPR and relocation

This is the part that differs most from a single-task CGRA.

**Addresses.** Every configuration register in the array has a 32-bit
address, made of the tile's column, the tile's row, and a register index:

```
 31      24 23       16 15        8 7         0
+----------+-----------+-----------+-----------+
|    0     | register  |    row    |  column   |
+----------+-----------+-----------+-----------+
```

The tile register indices are:

* 0..19: switch-box select of outgoing track side*5+track;
* 32..34: connection-box selects;
* 48: opcode or mode;
* 49: constant;
* 50: count;
* 51: MEM write {addr, data}.

IO tiles answer to row 16. Their register 0 is the lane-to-track mask, and
register 1 is the track returned to the GLB.

**Bitstreams.** A bitstream is a list of 64-bit GLB words {address, data}.
It is compiled as if its task occupied array-slice 0, or slices 0..n-1 for
an n-slice task. One bank configures one array-slice, so an n-slice task
is stored as n bitstream pieces in n banks. Piece k holds the writes for
columns 4k..4k+3.

**DPR.** The host gives a bank `CFG_START`, `CFG_LEN` and `DPR_DEST`, then
writes bit 2 of `CTRL`. The DPR engine reads one bitstream word per cycle.
It rewrites the column field as

    column' = DPR_DEST * 4 + (column mod 4)

and sends the write into the network. The network delivers the write to
array-slice `DPR_DEST` only, over that slice's own configuration bus.
Inside the slice the bus reaches every tile unpipelined, in the spirit of
Amber's column-wise configuration distribution.

While any bank is configuring a slice, the network freezes that slice
(`en=0`). Its cores and switch boxes hold state and emit nothing, and the
top's `slice_reconfig` output shows the freeze. Writing a core's opcode or
count register clears the core's accumulator or line buffer, so a newly
configured task starts clean. Other slices keep running. Several banks can
configure different slices in the same cycles. If two banks target the same
slice, the lower-numbered bank wins.

**Timing.** A DPR of N words produces one configuration write per cycle.
The first write reaches the slice four cycles after the start command:

* one cycle to accept the command;
* one cycle for the SRAM read;
* one cycle for the bank's output register;
* one cycle for the network register.

The end-to-end test checks that a parallel two-slice DPR of N words
finishes, freeze included, within N + 5 cycles of the start write.

**Moving a task.** The same bitstream pieces can be sent to any other free
slice by changing `DPR_DEST` and restarting DPR. The end-to-end test runs one
task in slice 3, then relocates the same bitstream to slice 7.

## The GLB-array network

A flexible-shape region may own more or fewer banks than slices. The banks
it owns need not sit above its slices either. So data cannot simply go
straight down from each bank. The network gives each array-slice a route
register:

| bits | meaning |
|---|---|
| [4:0] | bank whose load lanes feed this slice (if bit 17) |
| [12:8] | bank that receives this slice's store lanes (if bit 16) |
| 16 | store route enabled |
| 17 | load route enabled |

The network is one selection stage followed by one register stage, for data
and for bitstreams alike. It adds one cycle in each direction. It allows any
bank-to-slice pairing. Keeping the banks and slices of a region contiguous,
as the architecture intends, is left to the scheduler.

## Host programming model

The host, a processor outside this design, sees one valid/ready bus
(`host_req_t`). A read answers on `h_rvalid`/`h_rdata`, and only one read
may be outstanding at a time.

| address | target |
|---|---|
| `addr[31]=0` | GLB memory word: bank `addr[18:14]`, word `addr[13:0]` |
| `addr[31:30]=10` | bank register: bank `addr[8:4]`, register `addr[3:0]` |
| `addr[31:30]=11` | network route register of slice `addr[7:0]` |

The bank registers are:

| register | name | meaning |
|---|---|---|
| 0 | `LD_START` | first word of the load stream |
| 1 | `LD_LEN` | words in the load stream |
| 2 | `ST_START` | first word the store stream writes |
| 3 | `ST_LEN` | words the store stream expects |
| 4 | `ST_MASK` | lanes that must be valid for a store |
| 5 | `CFG_START` | first word of the bitstream |
| 6 | `CFG_LEN` | words of bitstream |
| 7 | `DPR_DEST` | destination array-slice of DPR |
| 8 | `CTRL` | write: bit 0 starts load, bit 1 starts store, bit 2 starts DPR |
| 9 | `STATUS` | read: bits 0..2 busy (load, store, DPR); bits 4..6 done |

Inside a bank, the single SRAM read port serves the DPR engine first, then
the load engine, then host reads. The write port serves the store engine
first, then host writes. A host access that loses arbitration waits with
`h_ready` low. To run a task, the host:

1. preloads its input data and its bitstream pieces into free banks;
2. runs DPR into free array-slices;
3. writes the route registers;
4. starts the store bank(s), then the load bank(s);
5. polls `STATUS`, or watches `bank_busy`, until the store is done.

## What is given and what is chosen

These follow the source architecture:

* the sizes in the table above, except the word widths and the MEM depth;
* the GLB-slice and array-slice partitioning;
* flexible-shape regions;
* one bank reconfiguring one four-column array-slice;
* a destination-region register in each bank;
* region-agnostic bitstreams compiled for the leftmost region;
* unpipelined configuration distribution down the columns;
* PE tiles with multiply-accumulate;
* MEM tiles used as scratchpads;
* switch boxes and connection boxes over five tracks per side;
* IO tiles at the top of the array.

These are this implementation's own choices:

* the 16-bit word with a valid bit, and the static (non-stalling) dataflow;
* the PE operation set and the MEM modes;
* registered switch-box outputs, and any-to-any selection in the switch
  boxes and connection boxes;
* three operands per core;
* the configuration address layout and the register indices;
* one DPR write per cycle, and the relocation formula;
* the load and store engines, with linear addresses and 64-bit words split
  into four lanes;
* the structure of the GLB-array network. The source only names it a
  multi-stage network.
* the host bus, the address map and the bank registers;
* freezing the target slice during DPR;
* the one-read, one-write bank SRAM.

Not modelled:

* the column clock distribution. It is a physical design technique with no
  logic of its own.
* the host processor and the scheduler, which is software on the host;
* the compiler that produces bitstreams.

The baseline CGRA and its AXI4-Lite configuration path, and the
fixed-size and variably sized region schemes, are points of comparison in
the source. They are not part of this design.

Known simplifications:

* A bank's stream engines address only that bank. A task that keeps data in
  several GLB-slices reaches them by re-pointing routes and engines between
  phases; there is no single address space across a region.
* Operands are not aligned automatically. Misbalanced paths lose words.

## Fitting the evaluated tasks

The evaluated task variants need 2 to 7 array-slices and 4 to 20
GLB-slices. The chip has 8 and 32, so every variant fits on its own. Two
examples of the tile counts:

* The first ResNet-18 layer group, at 64 MACs per cycle, needs 80 PE and
  17 MEM tiles; two slices give 96 and 32. It also needs 750 KB of GLB;
  seven banks give 896 KB.
* The 4x unrolled version needs 288 PE tiles; six slices give exactly 288.

Whether two tasks fit together is the scheduler's question. For example, a
2-slice, 20-bank layer and a 4-slice, 7-bank Harris detector (6 slices,
27 banks) run side by side.

## Simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and ends with `$finish`, and each has a
watchdog. Build with Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal rtl/cgra_pkg.sv rtl/*.sv \
    tb/tb_cgra_top.sv --top-module tb_cgra_top -o sim -Mdir obj && obj/sim
```

`tb_cgra_top` runs the whole chip at its full default size:

* two bitstream pieces configure slices 5 and 6 in parallel;
* a two-slice task (y = x + 100) streams 64 words from bank 8 to bank 10;
* meanwhile bank 1 reconfigures slice 3 for a second task (y = 3x), which
  then runs from bank 1 to bank 2;
* the second task's bitstream is relocated to slice 7 and run again.

The test reads all results back over the host bus. It counts each
mechanism (DPR, parallel DPR, relocation, flexible region, a region
crossing a slice boundary, a freeze while another region runs, and two
tasks streaming together) and fails if any of them never happened. Building
the full-size model takes about four minutes; the run itself takes under a
second.

`tb_workload_fir` is a small stand-in for the evaluated convolution and
stencil kernels. It also runs on the full-size chip. It builds a 3-tap
filter, y[n] = w0*x[n] + w1*x[n-1] + w2*x[n-2], inside one array-slice:

* two MEM tiles act as one-sample line buffers;
* one PE multiplies and two PEs multiply-accumulate;
* routes are padded so that operands meet in the same cycle.

The test relocates the filter's 48-word bitstream to slice 2 and filters
200 samples, then repeats the run in slice 6 with other weights. It compares
every output with the formula.

The unit testbenches check, among other things:

* the one-cycle core and switch-box latencies;
* the 4-cycle IO-to-IO round trip through a slice;
* the DPR latency and relocation in one bank;
* the network's priority and freeze rules.
