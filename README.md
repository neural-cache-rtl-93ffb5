# Neural Cache RTL: a last-level cache that computes

A server processor's last-level cache (LLC) is made of thousands of small SRAM arrays. Each array
already has 256 bit lines and sense amplifiers. This design turns every bit line into a tiny
one-bit ALU, so that all arrays together behave like one very wide SIMD machine for
deep-neural-network inference:

- 14 slices × 20 ways × 4 banks × 4 arrays × 256 bit lines = 1,146,880 lanes.
- Each lane adds, multiplies, compares and moves 8-bit-quantised values one bit per cycle.
- Because data stays inside the cache, weights and activations hardly move.

The repository gives synthesizable SystemVerilog for the compute path:

- the bit-line peripheral and the compute array;
- the per-bank control FSM and the bank with its replication latch;
- the slice with its buses;
- the control box with its transpose units;
- the inter-slice ring;
- a top level `neural_cache` with the full 14-slice, 20-way configuration.

It also includes self-checking testbenches. One of them runs a small convolution layer end to
end.

## 1. Computing on bit lines

### Transposed storage

A vector is stored *transposed*: element *k* lives entirely on bit line *k*. Its bits sit on
consecutive word lines, least significant bit first. An *n*-bit operand at row `r` therefore
occupies rows `r .. r+n-1` of every bit line. An operation on two vectors is done one bit
position per cycle, on all 256 bit lines at once.

### Sensing two rows at once

In compute mode an array can open two read word lines together. With the bit lines precharged,
the two single-ended sense amplifiers of a column read:

- **BL** = `A & B` (the bit line stays high only if both cells hold 1);
- **BLB** = `~A & ~B`.

The column peripheral (`bitline_periph`) forms the following from those two values and its carry
flop `C`:

- `A ^ B = ~(BL | BLB)`;
- `Sum = A ^ B ^ C`;
- `Cout = BL | ((A ^ B) & C)`.

A 4:1 mux picks what is written back in the same cycle: `Sum`, `Cout`, `Data_in` (bus data, or
the sensed row shifted across bit lines) or the tag `T`.

### The tag flop and predication

The tag flop `T` is loaded from BL. It is the key to everything beyond addition. Under
*predication* the bit-line write driver is enabled only where `T = 1`. That gives per-lane
conditional writes with no per-lane instruction stream.

### Tricks that fall out of the sensing

The control FSM uses a few consequences of this sensing:

| Word lines opened | BL, BLB | Effect used for |
|---|---|---|
| none | 1, 1 | `Sum = C`, `Cout = 1`. With C cleared this writes zeros (`Sum`), writes ones (`Cout`) or stores the carry into the top result bit (`Sum`). |
| one row A | A, ~A | `Cout = A`: a copy. BL = A: load a tag from a row. |
| A and the all-ones row | A, 0 | `A ^ B = ~A`: the inversion needed for subtraction. |
| A and the all-zeros row | 0, ~A | Adds 0: zero-extends a shorter operand. |

Rows 255 (all zeros) and 254 (all ones) are reserved for these constants, and software writes
them once (`OP_ZERO`, `OP_ONES`). The carry flop is always left at 0 at the end of an
instruction, so an addition starts without a clearing cycle.

### Timing and the array model

One cycle is one array access: sense in the first half, write in the second. In the RTL the
array (`compute_array`) reads combinationally and writes at the clock edge. Its control is a
53-bit word (`actl_t`) that carries:

- two read rows, one write row and the mux select;
- carry and tag enables, predication and a latch clear;
- the shift distance.

The reduced read-word-line voltage that keeps two-row sensing from disturbing the cells is
analog, so it is not modelled.

## 2. The instruction set and how each instruction runs

Instructions are broadcast to every bank in the selected ways. Each bank's `bank_ctrl` turns one
instruction into a sequence of array control words, one per cycle. Rows `a`, `b` and `d` are
8-bit row addresses. `n` is a width in bits.

| Opcode | Effect | Cycles |
|---|---|---|
| `OP_ZERO`, `OP_ONES` | `d[0..n-1]` ← 0 or 1 | n |
| `OP_COPY` | `d` ← `a` | n |
| `OP_MOVE` | `d` ← `a` taken from the bit line `shift` places higher (zero fill) | n |
| `OP_ADD` | `d[0..n]` ← `a[0..n-1] + b[0..nb-1]` (b zero-extended) | n + 1 |
| `OP_MUL` | `d[0..2n-1]` ← `a × b`, unsigned | n² + 4n − 1 |
| `OP_REDUCE` | `a[0..n]` ← `a + (a shifted by shift)`, scratch at `d` | 2n + 1 |
| `OP_MAX`, `OP_MIN` | `a` ← max/min(`a`, `b`), unsigned, scratch `d[0..n]` | 3n + 3 |
| `OP_RELU` | `a` ← 0 where `a` is negative (two's complement) | n + 1 |

`d` may equal `a` for ADD, so `OP_ADD a,b → a` accumulates in place.

### Addition

Addition is the base operation:

- Cycle *i* opens `a+i` and `b+i` and writes `Sum` to `d+i`, while `Cout` goes to the carry flop.
- One more cycle, with no row open, writes the carry (`Sum` = C) to `d+n` and clears the flops.

### Multiplication

Multiplication is shift-and-add under predication:

1. Clear the 2n product rows (2n cycles).
2. For each multiplier bit *j*:
   - load `b+j` into the tag (1 cycle);
   - add `a` into product rows `j .. j+n-1` with predicated writes (n cycles);
   - from the second bit on, store the carry into row `j+n` (1 cycle).

Lanes whose multiplier bit is 0 keep their partial product. The part after clearing takes
n² + 2n − 1 cycles, which is 7 for a 2-bit multiply. An 8-bit multiply takes 95 cycles in total.

### Maximum and minimum

MAX and MIN subtract, then copy selectively:

1. Write `~b` to scratch (n cycles).
2. Set the carry (1 cycle).
3. Add `a` (n cycles), giving `a − b` with its no-borrow bit.
4. Store the no-borrow bit and load it into the tag (2 cycles).
5. Copy `b` over `a` in the lanes the tag selects (n cycles).

### ReLU

ReLU loads the sign bit into the tag. It then writes zero to all n bits of the lanes whose tag is
set.

### Reduction

A reduction step moves the vector `shift` bit lines down, into scratch rows, and adds it in
place. Repeating it with shift 4, 2 and 1 sums 8 neighbouring bit lines into the first of them.
Each step widens the sum by one bit: call it with n, n+1, n+2.

Reductions across arrays, and the collection of results, use bus reads and writes or the `C_XFER`
way-to-way transfer (section 4).

## 3. From array to chip

```
neural_cache ── ring of NSLICES ring_stop's (requests one way, replies the other)
   └─ per slice: ring_stop ── cbox (command FIFO, NTMU transpose units) ── llc_slice
                                      llc_slice: NWAYS ways × 4 banks (cache_bank)
                                      cache_bank: bank_ctrl + 4 compute_array (2 pairs)
                                      compute_array: 256×256 bits + bitline_periph
```

### Bank (`cache_bank`, 32 KB)

A bank holds four 8 KB arrays in two pairs. The two arrays of a pair share sense amplifiers.

- **Bus port.** The bank's 64-bit quadrant bus carries 32 bits for each pair per cycle: bits
  31:0 for pair 0 and 63:32 for pair 1.
  - A write names a row, one of the eight 32-column chunks, and `sel`, the array inside each
    pair.
  - A read returns the same 64-bit slice one cycle later.
- **Replication latch.** A write with `rep` set is also captured in a 64-bit latch. The next cycle
  replays it into the *other* array of each pair, while the bus already carries the next word.
  Data wanted by all four arrays (such as inputs shared by different output channels) thus costs
  N + 1 bus cycles instead of 2N.
- **Control.** One `bank_ctrl` drives all four arrays with the same control word.
- **Arbitration.** A bus write has priority over a latch replay, and a replay over a read. A bus
  access while the FSM computes is illegal, and an assertion checks for it.

### Slice (`llc_slice`, 20 ways, 2.5 MB)

A slice has two buses:

- **Address bus.** It broadcasts a `C_INSTR` to every bank of the ways in `way_mask`.
- **Data bus.** It is 256 bits wide, made of four 64-bit quadrant buses: quadrant *q* reaches bank
  *q* of every way.
  - `C_WRITE` is broadcast to all ways in `way_mask`.
  - `C_READ` reads one way and answers two cycles after the command.
  - `C_XFER` reads one way and writes the word into other ways one cycle later. It is how results
    reach the reserved output way.

`cmd_ready` is low while any bank computes or a transfer is in its write cycle.

Way roles are a software convention:

- ways 1–18 hold filters and compute;
- way 19 holds a layer's inputs and outputs;
- way 20 is left to the processor cores.

The hardware treats all 20 ways alike.

### C-BOX (`cbox`) and transpose units (`tmu`)

Commands from the ring wait in a 16-entry FIFO and issue in order.

The C-BOX hosts two 256 × 256 transpose units. Each is an array that can be written and read
both by rows and by columns.

- **Transposing on the way in.** Regular words are written as TMU rows (`C_TMU_WR`). `C_WRITE_T`
  then sends a TMU column to the slice as an ordinary bus write. This transposes first-layer
  inputs that arrive in regular layout.
- **Transposing on the way out.** The opposite direction is `C_TMU_WRCOL` followed by `C_TMU_RD`.

Every reply, from the slice or from a TMU, appears exactly two cycles after its command issues,
so replies never collide.

The ring cannot be back-pressured. Software must keep the queue from overflowing: `cbox_full` is
exported, and an assertion catches a lost command.

### Ring (`ring_stop`) and top (`neural_cache`)

The 14 slices sit on a bidirectional ring.

- **Requests** enter at stop 0 and travel one way, one register per hop. A request is either a
  broadcast to all slices or a unicast to one slice.
  - The sender sets the hop count: the destination index for a unicast, 13 for a broadcast.
  - Filter weights go by broadcast: one packet reaches every slice, and the slice bus then
    reaches every way.
- **Replies** travel the other way, back to stop 0, tagged with their source slice.
  - Traffic already on the ring has priority.
  - A stop's own replies wait in a 4-entry queue.

The host interface of the top is three things:

- a request port;
- a reply port;
- per-slice `slice_busy` and `cbox_full`.

The processor cores and the DRAM side that would drive these are outside this design.

### Command and packet formats

The formats are defined in `nc_pkg`:

- `cmd_t`: kind, way mask, source way, row/chunk/sel, second row/chunk/sel for transfers, TMU
  index, instruction, and 256 data bits;
- `req_t` = {bcast, dst, hops, cmd};
- `rsp_t` = {src, data}.

## 4. Mapping a convolution

The end-to-end testbench shows the intended use, which follows the mapping the design was made
for.

### Layout inside an array

- Each bit line holds one input channel of one output pixel.
- A group of C adjacent bit lines holds the C channels of a pixel (C padded to a power of two).
- Each bit line stores the R×S filter bytes for its channel and the matching R×S input bytes.
- Each bit line also has a 24-bit partial sum and 16 scratch rows.
- R×S above 9 is split across bit lines. 1×1 filters pack several channels on one bit line.

### Computing one output

1. R×S times: `MUL` (8×8 → 16 bits), then `ADD` into the partial sum.
2. log2(C) `REDUCE` steps sum the channels into the group's first bit line.
3. Batch-norm scale and offset use `MUL`/`ADD` with scalars written by the host. Requantisation
   shifts come free, by addressing the result from a higher row.
4. `RELU`, then pooling by `MOVE` + `MAX`.
5. `C_XFER` collects the results into the reserved way.

All ways and slices run the same instruction stream. Slices differ only in the input pixels they
were given.

### Capacity

With a 3×3 filter an array uses 72 filter rows, 72 input rows, 24 partial-sum rows and 16 scratch
rows, 184 of 256 in all.

Every layer of Inception v3 fits the default configuration:

- The largest layer output is 147 × 147 × 64 = 1.38 MB. The reserved ways of 14 slices hold
  1.75 MB.
- The largest filter set is 5.8 MB. It fits when output channels are divided among slices:
  14 × 288 arrays × 256 bit lines × 9 bytes = 9.3 MB of filter space.

## 5. Where this RTL departs from, or goes beyond, the paper's description

- **Multiply cycle count.** The multiply follows the published 2-bit walk-through exactly, which
  gives n² + 4n − 1 cycles including clearing the product. The published total is n² + 5n − 2
  without the initialisation steps being listed: 102 instead of 95 cycles for 8 bits.
- **Division is not implemented.** Only its cost is published (1.5n² + 5.5n cycles), not its
  algorithm. Average pooling over 8×8 needs only a shift, which is a row offset.
- **Moving data across bit lines** uses a shifter from the sensed row to the write-back mux. The
  original description only says "moves".
- **Chosen here, not specified in the source description:**
  - the instruction encoding;
  - the FSM step order;
  - the replication-latch timing;
  - the command set and formats;
  - the C-BOX queue;
  - the ring protocol (request and reply directions, hop counts);
  - the TMU size and count.
- **Not modelled:**
  - the conventional cache path (tags, coherence, replacement);
  - the analog sense amplifiers and word-line underdrive;
  - the host cores;
  - DRAM.
- **Latches** are edge-triggered flops, and the two-phase array cycle is one clock cycle.

## 6. Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_bitline_periph` | sum, carry, mux, predication and latches against a per-column model (64 columns) |
| `tb_compute_array` | two-row sensing, per-chunk writes, shift moves |
| `tb_bank_ctrl` | every instruction on random data against integer models, with exact cycle counts (MUL 11 cycles for n=2 and 95 for n=8, MAX/MIN 27, RELU 9, MAC and reduction chains) |
| `tb_cache_bank` | plain and replicated bus writes (N+1 cycles, 128 replays), reads, ADD through the bank (9 cycles) |
| `tb_tmu` | row/column write and read, transposition |
| `tb_llc_slice` | 20-way slice: way-mask broadcast, reads with two-cycle latency, transfers, instructions in selected ways |
| `tb_cbox` | transpose on the way in and out, queueing behind a computing slice, TMU operation count |
| `tb_ring_stop` | four stops: unicast, broadcast, reply ordering and priority |
| `tb_neural_cache` | 2 slices × 3 ways. A 2×2 × 8-channel convolution with bias, ReLU and 2:1 max pooling, over 1024 pixels per way, with inputs through the TMU on one slice and direct on the other. It counts broadcasts, unicasts, TMU operations, latch replays, predicated writes, shifted writes, FIFO queueing, transfers, far-slice replies, ReLU clamps and both MAX outcomes, and fails if any is zero. It also checks the MUL busy time (95 cycles) and about 14,000 result bits. |

Running one with Verilator:

```
verilator --binary --timing --assert rtl/nc_pkg.sv rtl/*.sv tb/tb_neural_cache.sv \
    --top-module tb_neural_cache -o sim && obj_dir/sim
```

### Largest sizes simulated

The top has been simulated at 2 slices × 3 ways (`tb_neural_cache`). A single slice has been
simulated at its full 20 ways × 4 banks (`tb_llc_slice`, 320 arrays).

The top at its default size (14 slices × 20 ways, 4480 arrays) passes lint and elaboration, but
it has not been simulated. Verilator flattens each slice's 80 banks into one model of several
hundred megabytes of C++, and compiling it takes well over half an hour on a small machine.
Passing `--inline-mult 0`, or building with many parallel jobs, is the way to try it.

## 7. Parameters

| Where | Parameter | Default | Meaning |
|---|---|---|---|
| `nc_pkg` | `ROWS`, `COLS` | 256, 256 | array word lines, bit lines |
| `nc_pkg` | `NWAYS_MAX` | 20 | ways per slice (width of `way_mask`) |
| `nc_pkg` | `BANK_W`, `BUS_W`, `CHUNK_W` | 64, 256, 32 | quadrant bus, slice bus, bits per pair per cycle |
| `nc_pkg` | `ZERO_ROW`, `ONES_ROW` | 255, 254 | constant rows |
| `neural_cache` | `NSLICES`, `NWAYS` | 14, 20 | slices, ways |
| `cbox` | `NTMU`, `DEPTH` | 2, 16 | transpose units, FIFO entries |
| `tmu` | `N` | 256 | TMU size |
| `ring_stop` | `ID`, `RQ` | 0, 4 | stop number, reply queue |

Row addresses are 8 bits and widths 6 bits, so a single operand can be up to 63 bits wide.
