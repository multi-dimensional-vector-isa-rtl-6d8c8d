# A multi-dimensional vector engine inside a mobile L2 cache

A phone core's private L2 cache holds dozens of 256 × 256 SRAM arrays. If two
word-lines of such an array are opened at once, each bit-line senses the AND
of the two cells and its complement senses their NOR. Add a full adder and two
latches under every bit-line and the array becomes 256 one-bit ALUs. Thirty-two
arrays (half of a 512 KB, 8-way L2) then form an **8192-lane bit-serial SIMD
engine**. An n-bit add takes n clocks, but it runs on 8192 elements at once.

The hard part is using 8192 lanes. Mobile loops are short: they nest two to
four levels deep, each level has only tens to hundreds of iterations, and
their rows often sit at arbitrary addresses. This design therefore presents
every vector register as a **logical array of up to four dimensions**,
`PR[w][z][y][x]`, flattened onto the 8192 lanes. One instruction can load a
whole 2-D or 3-D tile. The loaded data can be:

- strided in each dimension;
- replicated along any dimension;
- gathered from a table of row pointers.

Masking also works per dimension: switching off element `w` of the outermost
dimension removes whole blocks of lanes from the following instructions.

The RTL here implements the compute half of the cache and the small helper it
needs in the core's load/store queue. The top module is `mve_top`.

## Organisation

```
 core ──instr──► mve_controller ──cmd/ack──► 8 × control_block
   │              (queue, CRs,                 (cb_fsm + 4 × data_array,
   │               CB PCs, mask)                1024 lanes each)
   │                   │ memory op                   ▲ bit-slices
   │                   ▼                             │
   │                  agu ──lane addr──► mshr ──► xb ──► tmu ─┘
   │                                      ▲  │        (1024 × 64 transpose buffer)
   │                                      │  ▼
   │                                regular L2 half (outside this design)
   └─ config, committed stores, scalar load addresses ─► address_decoder
```

| Module | What it is |
|---|---|
| `mve_pkg` | Sizes, instruction format, command and micro-op structs. |
| `bitline_peripheral` | The logic under one bit-line: NAND/OR/XOR from the sensed AND/NOR, full adder, carry latch C, tag latch T, write driver gated by the lane's write select and the predicate. |
| `data_array` | One 256 × 256 array with two row decoders and 256 peripherals. |
| `cb_fsm` | Expands one instruction into one micro-op per clock for its arrays; pulses `ack` when done. |
| `control_block` | One `cb_fsm` plus four `data_array`s: 1024 lanes. |
| `mve_controller` | Instruction queue (2 KB, 128 slots), control registers, dimension mask, one PC per control block, memory-op sequencing. |
| `agu` | Per-lane address generator for strided and pointer-based accesses. |
| `mshr` | 46 miss registers that merge lane requests into cache-line reads; passes stores through; requests L1 evictions. |
| `xb` | Moves an element between a 64-byte line and its lane's word. |
| `tmu` | Transpose buffer: written one element per lane, read one bit-slice across all lanes (and the reverse for stores). |
| `address_decoder` | In the core: holds the address range of each in-flight vector store and flags scalar loads that hit one. |

## Data layout and bit-serial arithmetic

Elements are stored **vertically**. Lane `l` of a register is bit-line `l`. An
n-bit element occupies n consecutive word-lines, least significant bit first.
Register `r` at width `n` starts at word-line `r·n`. The element width is a
control register (`SETWIDTH`). Because the width is variable, so is the number
of registers: a narrower width leaves room for more of them.

Three areas at the top of every array are reserved:

- word-line 255 holds all ones; it is written once after reset;
- scratch S1 is the n word-lines below it;
- scratch S2 is the n word-lines below S1.

The free word-lines therefore hold ⌊(255 − 2n)/n⌋ registers: 29 at 8 bits, 13
at 16 bits, 5 at 32 bits. The hardware does not check this limit.

Each clock, one micro-op (`uop_t`) goes to every array of a control block. It
says:

- which word-lines to open (zero, one or two);
- which node to write back (AND, NOR, NAND, OR, XOR, sum, external data bit,
  or a constant);
- into which word-line to write it;
- how to treat the carry latch (keep, force 0, force 1);
- whether to load the tag latch T, and from what;
- whether the write is predicated on T.

Instructions are built from these micro-ops:

| Operation | Clocks (n = width) | How |
|---|---|---|
| add, xor, copy, set-to-constant | n | one bit per clock, the carry stays in C |
| shift / rotate by a constant | n (in-place rotate 2n) | bit i is written to i±k; vacated bits get zeros (or the sign bit for a signed right shift) |
| subtract | 2n | per bit: write ¬B to scratch, then A + ¬B with carry-in 1 |
| less-than, greater-or-equal | 2n unsigned, 2n+1 signed | subtract into scratch; the final carry goes to T |
| equal, not-equal | 2n | XOR into scratch, then a carry chain against the ones row ORs the bits |
| min, max | 4n (+1 signed); 3n (+1) when the destination is a source | copy one source to the destination, compare into T, copy the other source where T is set |
| shift by a register | 2n + log2(n)(n+1) | copy B to scratch and A to the destination, then per bit i of B: load it into T, shift the destination in place by 2^i under T; only the low log2(n) bits of B count |
| multiply (low n bits) | n(n+1)/2 + 4n | copy the operands, clear the destination, then per multiplier bit i: load it into T, add A into bits i..n−1 under T |
| load from / store to the transpose buffer | n | one bit-slice per clock |

Greater-than and less-or-equal are less-than and greater-or-equal with the
operands swapped. Any instruction can carry a predicate bit; its result is then
written only in lanes whose T is set. Multiply uses T itself, so it ignores the
predicate and leaves T changed. So do min, max and the shift by a register.

The paper this design follows gives n clocks for comparisons and n² + 5n for
multiply. The sequences here are this design's own. Their compare is longer
and their multiply shorter, since it skips partial-product bits above n.

## Multi-dimensional registers and addressing

`SETDIMC` selects 1 to 4 dimensions and `SETDIML d, len` sets their lengths.
Dimension 0 varies fastest:

    lane = ((w·L2 + z)·L1 + y)·L0 + x

A strided load or store gives each lane the address

    base + (w·S3 + z·S2 + y·S1 + x·S0) · element_bytes

Each stride comes from a 2-bit mode per dimension, carried in the instruction:

| Mode | Stride |
|---|---|
| 0 | 0: replicate along this dimension |
| 1 | 1: consecutive elements |
| 2 | S(d−1) · L(d−1): continue where the dimension below ends (a row-major matrix); 1 for dimension 0 |
| 3 | the load or store stride register of that dimension (`SETLDSTR` / `SETSTSTR`, in elements) |

A **random-base** access (`RLD`/`RST`) takes its highest dimension from
memory. Element `w` of that dimension starts at the 64-bit pointer stored at
`base + 8·w`. The lower dimensions stride from that pointer as above. The AGU
fetches each pointer once, when its walk reaches a new `w`.

The source paper writes the pointer case as `Base_w + z·S3 + y·S2 + x·S1`, but
its figures and code examples give dimension 0 the first stride mode. This
design follows the figures.

The AGU walks the lanes of one control block per call, one lane per clock. It
keeps an index and a running offset for each dimension, so there is no
multiplier in the per-lane path. Lanes past the last element, and lanes whose
outer element is masked off, produce no request.

## Two kinds of masking

- **Per lane:** a compare writes its result into T, and a later predicated
  instruction writes only where T is set.
- **Per outer element:** `UNSETMASK w` / `SETMASK w` clear or set bit `w` of a
  256-bit mask register; the outermost dimension is limited to 256 elements
  for this reason. After any change to the mask or to the shape, the
  controller walks the mask (one element per clock). It works out which
  control blocks still hold a live lane.
  - Blocks with no live lane skip every following instruction entirely.
  - Lanes of a masked element inside a live block still compute, but loads and
    stores leave them untouched.

## The controller: non-blocking compute, one memory op at a time

Each queue entry records which control blocks must still run it. Each block
has its own PC into the queue:

- it skips entries not meant for it;
- otherwise it receives the command and, on `ack`, clears its bit;
- the oldest entry leaves the queue when no bits remain.

Blocks can therefore drift apart by many instructions. When the queue is full
(128 entries), `core_ready` falls.

Loads and stores move data between memory and the arrays through a single
transpose buffer. They therefore run one at a time, and the controller
accepts nothing new until one has finished. For each control block in turn:

- **Load:**
  1. the AGU walks the block's lanes;
  2. the MSHRs merge the requests into line reads;
  3. the crossbar puts each returned element into its lane of the transpose
     buffer;
  4. when all lines are back, the block (after finishing its earlier
     instructions) copies the buffer in, one bit-slice per clock. Lanes that
     received no element (masked) keep their old contents.
- **Store:** the block copies its register out to the buffer, then the AGU
  walks the lanes. Each element goes out as a line write with byte enables.
  When the last block is done, the controller acknowledges the store to the
  core's address decoder.

**Coherence.** The L2 reports with each returned line whether it is also in
the L1 (its presence bit). The MSHR then raises `l1_evict` for that line.

**Core side.** When a vector store commits, the address decoder computes its
range:

    [base, base + Σ Ld·Sd·bytes)

It buffers this range (8 entries) until the controller acknowledges the store.
`ld_conflict` tells the core that a scalar load falls inside a buffered range.
A pointer-based store blocks every load, because its addresses are not known in
the core.

## Instruction format (`mve_instr_t`)

`op` (6 bits), `sgn`, `pred`, `vd`, `vs1`, `vs2` (5 bits each), `modes` (four
2-bit stride modes, dimension 0 in bits 1:0), `imm` (8 bits), `rs` (64-bit
scalar operand).

| Instruction | `imm` | `rs` |
|---|---|---|
| `SETDIMC` | – | dimension count |
| `SETDIML` | dimension | length |
| `SETLDSTR`, `SETSTSTR` | dimension | stride in elements |
| `SETWIDTH` | width: 8, 16, 32 or 64 | – |
| `SETMASK`, `UNSETMASK` | – | outer element index |
| `SLD`, `SST`, `RLD`, `RST` | – | base address (`modes` gives the strides) |
| `SHIL`, `SHIR`, `ROTIL`, `ROTIR` | – | shift amount |
| `SETDUP` | – | constant |

Compute operations: `CPY`, `ADD`, `SUB`, `MUL`, `XOR`, `GT`, `GE`, `LT`, `LE`,
`EQ`, `NE`, `MIN`, `MAX`, `SHVL`, `SHVR` (the last two shift `vs1` by `vs2`).

## Top-level interface (`mve_top`, no parameters)

| Port | Meaning |
|---|---|
| `core_valid`, `core_ready`, `core_instr` | Instructions in program order; taken when both valid and ready are high. |
| `ld_addr` → `ld_conflict` | Combinational check of a scalar load address. |
| `mem_req_valid`, `mem_req_ready`, `mem_req` | Line reads and line writes with byte enables to the regular L2 half. |
| `mem_rsp_valid`, `mem_rsp_ready`, `mem_rsp` | Read data (with the L1 presence bit) or a write acknowledgement. Read responses may come in any order. |
| `l1_evict_valid`, `l1_evict_line` | A line to be evicted from the L1. |
| `busy` | Something is still in flight. |

Reset is asynchronous and active low. After reset a control block spends one
clock writing its all-ones row.

## Where this departs from the source paper, and what is missing

- **Not built:**
  - type conversion and all floating-point operations;
  - the scalar core;
  - the regular L2 half, which is an external port here.
- **Latencies differ:** compares take 2n clocks instead of n; multiply takes
  n(n+1)/2 + 4n instead of n² + 5n; min/max take 3n to 4n instead of 2n; the
  shift by a register takes 2n + log2(n)(n+1) instead of n log n.
- **Structure:**
  - a single transpose buffer is shared by the eight control blocks;
  - memory ops are walked one lane per clock;
  - the transpose buffer has a per-lane valid bit so that masked lanes are
    not overwritten.
- **This design's own choices:**
  - 8 targets per MSHR entry;
  - 16-byte queue slots;
  - an 8-entry store buffer;
  - 64-byte lines and 64-bit pointers;
  - the reset values: one dimension of 8192 lanes, 32-bit elements, all mask
    bits on.
- **Bit-level arrays:** the arrays are modelled as register arrays, with no
  analog sensing.
- **Lint warnings:** Verilator reports `SYNCASYNCNET` on `rst_n` in modules
  with assertions. It comes from `disable iff (!rst_n)` and is harmless.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.
With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl rtl/mve_pkg.sv rtl/*.sv \
          tb/tb_mve_top.sv --top-module tb_mve_top -Mdir obj_top -j 8
./obj_top/Vtb_mve_top
```

| Testbench | What it checks |
|---|---|
| `tb_bitline_peripheral` | Every input combination of the bit-line logic. |
| `tb_data_array` | Two-row logic, ripple add, predicated and lane-masked writes. |
| `tb_cb_fsm`, `tb_control_block` | Every operation at 8 and 16 bits against integer arithmetic, and the clock count of every sequence. The first uses one array; the second uses a full 1024-lane block. |
| `tb_agu` | Addresses of 1-D to 4-D, masked, strided and pointer-based walks against a direct formula; one lane per clock. |
| `tb_mshr` | 800 merged requests plus writes against a memory model; exactly-once delivery, fewer line reads than requests, L1 evictions. |
| `tb_xb`, `tb_tmu` | All sizes and offsets; word-in / slice-out and slice-in / word-out. |
| `tb_mve_controller` | Mask-to-block mapping, decode, per-block order, queue full at 128 entries, load and store sequencing. |
| `tb_address_decoder` | Range edges, in-order retire, pointer-based store, full buffer. |
| `tb_mve_top` | End to end at full size (see below). |

`tb_mve_top` runs the full design (8192 lanes) through a program and compares
every word of memory. The program uses 16-bit elements:

1. two strided loads, an add and a store;
2. a compare, a predicated add and a store;
3. an unsigned maximum and a shift by a register, each stored;
4. a 2-D shape with one outer element masked off, a multiply and a store;
5. a pointer-based load and a store.

The testbench counts the following mechanisms and fails if one never occurs:
strided load, random load, pointer fetch, store, MSHR merging, block skipping,
predication, L1 eviction, load conflict and queue back-pressure. The run takes
about 67,000 clocks. It builds in about 1.5 minutes and runs in seconds.
