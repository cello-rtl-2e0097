# CELLO: an accelerator node with a hybrid implicit/explicit tensor buffer

Iterative solvers such as block Conjugate Gradient (CG) run a loop of small
tensor operations over a few tall, skinny M x N tensors (P, R, S, X, with M in
the tens of thousands and N ≤ 16) and some tiny N x N tensors (Δ, Λ, Φ, Γ).
Every tall tensor is produced by one operation and read again by several later
ones. Some of those reads come right after the write (the data can be passed
straight on, or *pipelined*). Others come several operations or a whole loop
iteration later (*delayed*), and some of the tensors are reused across
iterations. A pure scratchpad needs software to place and evict every tile by
hand. A pure cache loses the tensor-level knowledge of when data will be
reused, so it thrashes when the working set is larger than the buffer.

CELLO gives each kind of reuse its own storage:

| storage | managed | holds |
|---|---|---|
| input buffer | explicit | tensors read from DRAM (e.g. the initial operands), loaded by DMA |
| pipeline buffer | explicit | output tiles going straight to the next operation, or held a little longer for a second consumer (*delayed hold*) |
| register file (RF) | explicit | the small N x N tensors, streamed into the PE array |
| CHORD | hybrid | tensors written now and read much later (*delayed write-back*), 4 MB |

In CHORD the scheduler describes each tensor once: its address range, how often
it will still be read, and how soon. The hardware then decides, one line at a
time, which tensor keeps its place on chip. The hardest part of the design is
CHORD, so most of this document is about it.

This RTL builds one accelerator node at the evaluated size: 16384 MACs, a 4 MB
CHORD with a 64-entry index table of 512-bit entries, and a 1 GHz target clock
(no timing closure has been attempted). It runs every *dense* operation of the
CG loop. The sparse product S = A·P is not built, and neither is the software
scheduler that produces the schedule and the index-table contents.

## Data granularity

Everything is moved in **lines** of 16 words × 32 bits = 512 bits (64 B). One
row of an M x 16 tensor is one line. Global (DRAM) addresses count lines. A
4 MB SRAM is therefore 65536 lines, and the small tensors are 16 x 16 words:
16 lines. Arithmetic is 32-bit two's-complement integer with wrap-around. The
evaluated design uses 4-byte floating-point words; integers keep the
testbenches exact. Replacing the multiplier and adder in `pe_array` is the only
change a floating-point version needs.

## CHORD

### The index table instead of tags

CHORD (`chord`, with `riff_index_table` and `chord_data_array`) stores each
resident tensor as **one contiguous slice** of the SRAM. The slice holds a
prefix of the tensor: lines `start_addr .. end_chord_addr-1`. The rest of the
tensor, if any, lives in DRAM. Every tensor has one entry in a 64-entry table
(`cello_pkg::riff_entry_t`, exactly 512 bits):

| field | meaning |
|---|---|
| `valid` | entry describes a tensor |
| `open` | the slice may still grow; cleared once a line of the tensor has gone to DRAM or the slice has lost its tail to another tensor |
| `dir` | 0: the slice grows upwards from `start_idx`; 1: it grows downwards |
| `tid` | tensor id (the entry number) |
| `start_addr`, `end_addr` | global line range of the whole tensor, `[start, end)` |
| `end_chord_addr` | first global line **not** on chip; `end_chord_addr - start_addr` is the slice length |
| `start_idx`, `end_idx` | SRAM line of the first slice line, and one past the last (in the slice's direction) |
| `reuse_hist` | reads of the tensor so far |
| `reuse_freq` | reads still to come (from the schedule) |
| `reuse_dist` | operations until the next read (from the schedule) |
| pad | zero, to 512 bits |

Because a slice is contiguous, no tags are needed. A read of tensor `t` at
address `a` hits when `start_addr ≤ a < end_chord_addr`, and its SRAM line is
`start_idx + (a - start_addr)` for `dir = 0`, or `start_idx - (a - start_addr)`
for `dir = 1`. A miss is served from DRAM and is not allocated.

A tensor's **priority** is `{reuse_freq, ~reuse_dist}`. More future reads win,
and on a tie the nearer next read wins. Every read of a tensor's first line
counts as one reuse: `reuse_hist` goes up by one and `reuse_freq` down by one,
so a tensor that has had its last read drops to the bottom.

### Where empty space is

Slices with `dir = 0` are packed from line 0 upwards and slices with `dir = 1`
from the top downwards. The table computes, combinationally:

* `free_ptr`: the highest `end_idx` of the resident upward slices;
* `ceil_ptr`: the lowest line of the resident downward slices, or DEPTH if
  there are none.

The empty space is `[free_ptr, ceil_ptr)`. Gaps elsewhere are only reused
through Riff (below).

### Writing a tensor: Prelude and Riff

Producers write a tensor line by line in address order. A write that hits
(its address is already inside the slice) overwrites in place. A write of the
next line, `a == end_chord_addr`, while the slice is `open`, tries to grow the
slice. Anything else goes to DRAM.

For the **first line** of a tensor (empty slice) the controller chooses, in
this order:

1. **Prelude place.** The whole tensor fits in the empty space: take
   `free_ptr` and grow upwards.
2. **Riff, down-fill.** It does not fit, but the slice just below the empty
   space (tail at `free_ptr - 1`) belongs to a lower-priority tensor: start at
   `ceil_ptr - 1` and grow downwards through the empty space.
3. **Riff, grow into a neighbour.** As 2, but the empty space is used up:
   take that neighbour's tail line at once.
4. **Prelude, partial.** No lower-priority neighbour, but there is space: fill
   upwards and spill the rest of the tensor to DRAM when the space ends. The
   head of the tensor stays on chip.
5. **Riff on the lowest-priority tensor.** No space at all: the
   lowest-priority resident tensor that has lower priority than the new one is
   the victim, and the new slice starts in its tail line.
6. **Spill.** Otherwise the line goes to DRAM and the slice is closed.

For **every later line** the slice continues in its direction. The next SRAM
line is either free (place) or it is the tail line of a lower-priority slice
(Riff). In any other case the line spills and the slice is closed.

A Riff step takes one line from the victim:

1. The victim's tail SRAM line is read.
2. It is written back to DRAM at the victim's global address
   `end_chord_addr - 1`.
3. The SRAM line is overwritten with the new tensor's line.
4. The victim's slice shrinks by one (`end_chord_addr`, `end_idx`) and its
   `open` bit clears.

The victim's data therefore stays correct: its head is still served from
CHORD, and its tail is read back from DRAM. The new tensor's slice grows in
the opposite direction of the victim's, into the space the victim gives up.
This "pushing back" of the victim's tail, one line per new line, is what
keeps both tensors contiguous.

Example: CHORD holds R (frequency 2) and X (frequency 1), and
there is no space left. The next tensor S has frequency 2. S's lines replace
X's tail one at a time. X keeps its head, its tail goes to DRAM, and later
reads of X's tail miss.

### Timing

CHORD serves one request at a time (valid/ready on the request, `rsp_valid`
for read data). Costs from acceptance:

| access | cycles |
|---|---|
| read hit | 2 |
| write hit or placement | 1 |
| Riff step | 3, plus the DRAM write handshake |
| read miss or spill | plus the DRAM handshake and its latency |

The index table must be programmed (`cfg_*`) while no request is in flight;
an assertion checks this. Events `ev_hit`, `ev_miss`, `ev_place`, `ev_evict`
and `ev_spill` pulse once per outcome, so traffic can be counted.

## The PE array and operations

`pe_array` has 1024 rows × 16 columns. Each row holds two stationary lines
(`a_line`, `b_line`) and 16 accumulators. It has two modes:

* **Uncontracted** (`Z = ±C ± A·B`, B a small 16 x 16 tensor, e.g.
  `X = X + P·Λ`, `S = R - S·Λ`). Row r holds row r of A. Each step streams row
  k of B from the RF, and every row does `acc[r][n] ±= a_line[r][k] · b[n]`.
  Sixteen steps finish a tile.
* **Contracted** (`Γ = Rᵀ·R`, `Δ = Pᵀ·S`, reduction over the long rank). Row r
  holds row r of both operands. Step k feeds a per-column adder tree over all
  valid rows into `sacc[k][n] += Σr a[r][k]·b[r][n]`. The result stays in the
  small accumulator over all tiles.

`op_sequencer` runs one operation from a descriptor (`cello_pkg::op_desc_t`):

| field | meaning |
|---|---|
| `mode` | uncontracted or contracted |
| `m_rows` | length of the long rank in lines, cut into tiles of 1024 |
| `k_len` | 1..16, steps per tile (the small rank) |
| `a_src`/`a_tid`/`a_base` | where A comes from: CHORD tensor id and address, input-buffer address, or the pipeline buffer (stream 0) |
| `c_src`/`c_tid`/`c_base` | the same for C, or `SRC_NONE` (the pipeline buffer gives stream 1) |
| `c_neg`, `ab_neg` | signs of C and of A·B |
| `b_slot` | RF slot of the small operand |
| `out_slot` | RF slot for a contracted result |
| `z_to_chord`, `z_tid`, `z_base` | write Z into CHORD as tensor `z_tid` |
| `z_to_pipe`, `pipe_cons` | push Z into the pipeline buffer, and which consumers will read it |

Each tile goes through strictly sequential phases:

1. Load the A lines, then the C lines, one line per fetch.
2. Initialise the accumulators and run `k_len` steps.
3. Write Z back to CHORD and/or the pipeline buffer.

After the last tile of a contracted operation, the `k_len` rows of the result
go into the RF. This follows the schedule rule of the design: the long rank is
outermost and tiled, the large tensor is stationary, and the small tensor is
streamed from the RF.

Choosing the destination of Z is how the three reuse kinds map onto the
memories:

* Z read by the very next operation goes to the pipeline buffer for one
  consumer.
* Z read by the next operation and by one more later operation goes to the
  pipeline buffer with two consumers (delayed hold).
* Z needed only after other tensors have been produced goes to CHORD (delayed
  write-back).

The small-matrix inversions of CG (Δ⁻¹ and friends) are done by the host,
which writes the results into the RF through `cfg_rf_*`.

## The explicit buffers

* `input_buffer` (2048 lines) takes a DMA command `{dram_base, local_base,
  count}`. It issues `count` line reads and stores the responses at
  consecutive local lines. `load_busy` stays high until the last line has
  landed. The datapath read has one cycle of latency.
* `pipeline_buffer` (2048 lines) is a ring with one write pointer and one read
  pointer per consumer (two consumers). A line is freed only once every
  enabled consumer has read it. Consumer 1 can therefore trail consumer 0 by
  up to the whole buffer: this is the delayed hold.
* `small_tensor_rf` has four slots of 16 x 16 words. It has one write port,
  used by the sequencer for contracted results and by the host otherwise, and
  combinational read ports.

## Top level

`cello_top` connects the blocks. The host:

1. Programs the CHORD index table (`cfg_tbl_*`).
2. Writes small tensors into the RF (`cfg_rf_*`).
3. Starts input-buffer loads (`ib_load_*`).
4. Issues one descriptor at a time (`op_start`, `op_desc`, `op_busy`,
   `op_done`).

Two DRAM ports leave the node: CHORD's read/write port (`ch_dram_*`) and the
input buffer's read port (`ib_dram_*`). Both are line-wide valid/ready with
in-order read responses. `mon_*` ports read the index table and the RF for
observation.

## Where this design departs from the evaluated one

The sizes follow the evaluated configuration: 4 MB CHORD, 64 × 512-bit index
table, 16384 MACs, N ≤ 16. The following are choices or simplifications of
this RTL:

* **No sparse operation.** S = A·P, with A in a compressed format, is not
  built. A CG iteration therefore needs S supplied by the host (through the
  input buffer or as a CHORD tensor). For that reason none of the evaluated
  matrices (fv1, shallow_water1, G2_circuit), the GCN layers (cora, protein,
  whose feature widths of 1433 and 29 also exceed the 16-word line) or the
  ResNet block runs end to end.
* **Integer arithmetic** in place of 32-bit floating point.
* **Line-granular CHORD.** The slice layout in two directions, the fixed write
  decision order above, the write-back of Riff victims, the non-allocating
  read miss and the reuse-count update rule are this design's reading of the
  policy description.
* **One outstanding CHORD request**, and strictly sequential load, compute and
  write-back phases in the sequencer. There is no overlap of DMA with
  compute, so the cycle counts are far from the evaluated performance.
* **Host-side work.** Small-matrix inverses and all scheduling decisions are
  made by the host. The scheduler that finds the schedule is software and is
  not part of the RTL.
* **Pipeline buffer depth** (2048 lines), the two consumers, the RF with four
  slots and the 1024 × 16 PE organisation are not given by the evaluation.
  They are chosen so that a 1024-line tile of a 16-wide tensor fits.
* **Single node.** The multi-node broadcast and reduction network for
  splitting the long rank is not built.

## Simulating

Any file can be compiled on its own with its dependencies. The package goes
first. For the end-to-end CG test:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/cello_pkg.sv rtl/chord_data_array.sv rtl/riff_index_table.sv rtl/chord.sv \
  rtl/input_buffer.sv rtl/pipeline_buffer.sv rtl/small_tensor_rf.sv rtl/pe_array.sv \
  rtl/op_sequencer.sv rtl/cello_top.sv tb/dram_model.sv tb/tb_cello_top.sv \
  --top-module tb_cello_top
./obj_dir/Vtb_cello_top
```

Every testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`. Each also has a watchdog that stops a
hung simulation. The testbenches also pass with random initial state
(`+verilator+rand+reset+2`).

| testbench | what it covers |
|---|---|
| `tb_chord_data_array` | random writes and reads over all 65536 lines against a reference copy, one-cycle read latency |
| `tb_riff_index_table` | free/ceil pointers, victim choice by priority, neighbour search, update ports |
| `tb_chord` | small CHORD (16 lines): hits, misses, Prelude placement and spill, Riff on a neighbour and on the lowest-priority tensor, down-fill, victim write-back, reuse counting |
| `tb_input_buffer` | three DMA loads of different lengths and bases (one wrapping past the last line), data against the DRAM model, one line per cycle |
| `tb_pipeline_buffer` | one consumer in order; two consumers with the second lagging, so that lines are held until both have read them, within the depth |
| `tb_small_tensor_rf` | every slot and row through the read and monitor ports, reset |
| `tb_pe_array` | both modes, signs, initialisation, step count and masking of unused rows, against a reference (32 rows) |
| `tb_op_sequencer` | descriptors from every source, multi-tile and partial tiles, contracted results into the RF (8 rows) |
| `tb_cello_top` | two CG iterations on a reduced node (16 PE rows, 64-line CHORD, M = 48), with every tensor compared to a reference. Counts pipelined, delayed-hold and CHORD-written operations, CHORD hits, misses, placements, evictions, spills, down-fills and DMA loads. |
| `tb_cello_full` | the top at its default sizes, M = 1500: Γ = SᵀS and Z = S·Λ written into CHORD, two tiles per operation |

`tb/dram_model.sv` is the behavioural DRAM used by the testbenches. Memory is
sparse, and an unwritten line `a` holds the words `(16a + w) ^ 0x5a5a0000`.
