# A sparse-LSTM inference engine in SystemVerilog

This RTL runs one time step of an LSTM speech-recognition layer on pruned,
12-bit quantised weights. The weights are stored compressed, and each
multiplier only does work where a weight is nonzero.

The idea is simple: pruning keeps about one weight in ten. If the hardware
reads and multiplies only the nonzero weights, a dense 1024-cell LSTM becomes
roughly ten times cheaper in memory traffic and arithmetic. Making that pay
off takes three pieces:

- a compact weight encoding that a small circuit can decode at one weight
  per cycle;
- a way of spreading the work over many multipliers that survives uneven
  sparsity;
- a scheduler that overlaps the nine matrix-vector products of an LSTM step
  with its element-wise operations.

The design follows the ESE architecture (Efficient Speech Recognition
Engine, FPGA'17). Its default parameters are that architecture's main
configuration:

| Quantity | Default |
|---|---|
| Channels | 32 |
| Processing elements (PEs) per channel | 32 |
| LSTM size | 153 inputs, 1024 cells, 512 projections |
| ActQueue FIFO depth | 8 |
| Ping-pong buffers | 2 × 512 words |
| Element-wise lanes | 16 |

## The computation

Each step computes the projected LSTM with peepholes:

```
i = σ(Wix x + Wir y' + Wic∘c' + bi)      f = σ(Wfx x + Wfr y' + Wfc∘c' + bf)
g = tanh(Wcx x + Wcr y' + bc)            c = f∘c' + i∘g
o = σ(Wox x + Wor y' + Woc∘c + bo)       m = o∘tanh(c)        y = Wym m
```

Here `'` marks the previous step, `∘` is element-wise multiplication, and
Wic/Wfc/Woc are diagonal, so they are stored as vectors.

There are nine sparse matrices: four 1024×153 (`W*x`), four 1024×512 (`W*r`)
and one 512×1024 (`Wym`).

The original equations write `g` with σ. The surrounding text calls g and h
the cell input and output activations, and the standard formulation uses
tanh there, so this design uses tanh for both.

## Number formats

All arithmetic is two's-complement fixed point. Shared constants are in
`ese_pkg`.

| Signal | Bits | Fraction bits |
|---|---|---|
| x, y, m (activations) | 16 | 11 |
| `W*x` weights | 12 | 4 |
| `W*r` weights | 12 | 7 |
| `Wym` | 12 | 7 |
| biases | 12 | 9 |
| Wic, Wfc | 12 | 11 |
| Woc | 12 | 10 |
| partial sums (Act Buffer) | 32 | 8 |
| c, gate pre-activations | 16 | 8 |
| sigmoid/tanh outputs, i f g o | 16 | 15 |

- **Products.** A PE product `act × w` is shifted right arithmetically to 8
  fraction bits: by 7 for the `W*x` matrices and by 10 for the others.
- **Pre-activations.** The adder tree adds four 32-bit terms: the x-product,
  the y-product, the peephole term and the aligned bias. The sum is
  saturated to 16 bits.
- **Truncation.** Every alignment truncates (arithmetic shift); nothing
  rounds.
- **Output.** `y` is saturated back to the 11-fraction-bit activation format
  and becomes `y'` for the next step.

## Compressed weights: relative-index CSC

Each matrix is split over the PEs of a channel by rows: row `r` goes to PE
`r mod 32`, as local row `r div 32`. Within a PE the slice is stored column
by column.

**Entries.** Each nonzero is one 16-bit entry:

```
 15            4 3        0
+---------------+----------+
| weight (12 b) | idx (4 b)|
+---------------+----------+
```

- `idx` is the number of zero rows skipped since the previous entry of the
  same column, counting from local row 0 for the first entry.
- If a gap is larger than 15, a padding entry (weight 0, idx 15) is
  inserted; it advances the row by 16 and adds zero.

**Pointers.** Per PE, per matrix, there are `n+1` column pointers
`p_0..p_n`. Column `j` owns entries `p_j .. p_{j+1}-1`, counted in that PE's
own stream.

**Stream format.** The memory side sends entries as 512-bit beats: one
16-bit entry for each of the 32 PEs, matching the DDR word width. Pointers
are sent the same way. Different PEs hold different numbers of entries, so
every PE's stream of a matrix is padded at the end with zero entries to the
length of the longest. `*_last` marks the final beat of a matrix.

**Decoding.** `spmat_read` rebuilds absolute rows with one adder and a
register:

```
row = (first entry of column ? 0 : previous_row + 1) + idx
```

## Inside a channel

A channel (`ese_channel`) runs the LSTM for one input sequence. All 32
channels share the weight and pointer streams and differ only in their x
vectors, so a whole weight beat is used 32 times.

### SpMV part

- **ActQueue.** `act_queue` broadcasts one element of the source vector (x,
  y' or m) per cycle into 32 small FIFOs (`act_fifo`), one per PE. It only
  pushes when no FIFO is full. A full FIFO stalls the broadcast.
- **PE.** Each PE (`ese_pe`) works column by column:
  - It pops `a_j` from its FIFO and `(p_j, p_{j+1})` from `ptr_read`. This
    takes one cycle.
  - It then does one multiply-accumulate per cycle for each of the
    column's entries: `ActBuffer[matrix][row] += a_j · w`.
  - After the last column it drains the tail-padding entries up to the one
    marked last, then pulses `done`.
- **Act Buffer.** `act_buffer` holds one 32-row region per matrix. A region
  is invalidated when its matrix starts. A row that has not yet been written
  starts from the product, so no clearing pass is needed.
- **Buffers.** `ptr_read` and `spmat_read` each sit on a `pingpong_buf`:
  two banks of 512 words, one filled from the stream while the PE reads the
  other.

### Element-wise part

This part makes one pass over the 1024 cells, 16 rows per cycle. Rows are
interleaved, so 16 consecutive rows come from 16 different PEs.

Per lane the datapath is:

1. **ElemMul 1** (`elem_mul`): the peephole product, or `f∘c'`.
2. **Adder tree** (`adder_tree`): four inputs, two adders then one. It adds
   the x-product, the y-product, the ElemMul-1 result and the bias.
3. **Sigmoid/Tanh** (`sigmoid_tanh`).
4. **ElemMul 2**: `i∘g` added to `f∘c'` to form c, or `o∘tanh(c)` to form m.

Results go to the channel's local vectors: c, h, the gates and m.

**Sigmoid and tanh.** Each uses a 2048-point table with linear
interpolation. Sigmoid covers [-64, 64) and tanh [-128, 128); both output 16
bits with 15 fraction bits. The tables are computed at elaboration time from
`1/(1+e^-x)` and `tanh(x)`, sampled at the table points and scaled by 2^15.
No data file is involved. Measured error over every input code: at most
1e-4 for sigmoid and 1.5e-3 for tanh. The tanh error is the interpolation
error of a 1/8 step.

### Writing y

After `Wym` finishes, the channel reads y out of the PEs one row per cycle.
It keeps y as `y'` and sends it out. Per channel, a `y_assemble` packs eight
values into a 128-bit word (value k in bits 16k+15:16k, a final partial word
zero-padded) for the host link.

## The schedule

`ese_controller` steps through the states INITIAL and STATE_1..STATE_6. Each
state has one or more phases. A phase runs one sparse product and one
element-wise operation at the same time:

| State | Phases (SpMV ‖ element-wise) |
|---|---|
| STATE_1 | `Wix x` ‖ – ; `Wfx x` ‖ – ; `Wcx x` ‖ `Wic∘c'` |
| STATE_2 | `Wir y'` ‖ `Wfc∘c'` ; `Wfr y'` ‖ i ; `Wcr y'` ‖ f |
| STATE_3 | `Wox x` ‖ g |
| STATE_4 | `Wor y'` ‖ c ; – ‖ `Woc∘c` ; – ‖ h = tanh(c) |
| STATE_5 | – ‖ o ; – ‖ m |
| STATE_6 | `Wym m` → y |

Each element-wise operation only uses products finished in earlier phases.
A phase ends when every channel reports both halves done.

`fetch_mat` tells the memory side which matrix to stream next. That lets it
prefetch the following matrix into the ping-pong buffers while the current
one is being multiplied. `step_done` pulses at the end of STATE_6.
`first_step` starts a new sequence with `c' = y' = 0`.

## Load imbalance, and the one way this design can hang

The PEs of a channel all consume one shared broadcast of activations and
one shared stream of weight beats, but they hold different numbers of
nonzeros. A PE with a light column runs ahead on activations until its
FIFO is empty. A PE with a heavy column falls behind until its FIFO fills
and stalls the broadcast. The depth-8 FIFOs absorb short-term differences;
over a whole matrix, the busiest PE sets the time.

The weight stream adds a constraint. A beat is only accepted when every PE
has room for its word, and a PE's buffer holds at most two banks. Suppose
one PE has consumed its whole buffer and needs more weights, while another
PE has both banks full and is waiting for an activation the first PE is
holding up. Then the system deadlocks.

Two rules keep this from happening:

- **Part-filled hand-over.** `pingpong_buf` hands a part-filled bank to
  the reader as soon as the reader runs dry, so a PE never waits on words
  that have already arrived.
- **Bounded skew.** The difference between PEs in entries consumed must
  stay below two bank sizes (1024 entries at the default). Pruning that
  balances nonzeros across PEs keeps it far below that, because each PE
  holds about 1/32 of every column. With unbalanced sparsity and small
  banks the design will hang; the reduced testbench uses 128-entry banks
  for this reason.

## Ports of `ese_top`

| Group | Signals | Meaning |
|---|---|---|
| control | `start`, `first_step`, `busy`, `step_done`, `state`, `fetch_mat` | one pulse of `start` runs one time step |
| pointers | `ptr_valid/ptr_data[32][16]/ptr_last/ptr_ready` | one beat = one column pointer per PE |
| weights | `w_valid/w_data[32][16]/w_last/w_ready` | one beat = one encoded entry per PE |
| vectors | `vec_we, vec_bcast, vec_ch, vec_sel, vec_addr, vec_data` | write one 16-bit element of x (per channel), a bias or a peephole diagonal (usually broadcast) |
| results | `y_word_valid[32]`, `y_word[32][128]` | packed y per channel |
| counters | `mac_count`, `stall_count`, `wait_count` | multiply-accumulates, ActQueue stall cycles, PE-cycles waiting for data |

Both streams are valid/ready handshakes. A beat moves on a rising clock
edge with valid and ready both high. The reset (`rst_n`) is synchronous and
active low. There is a single clock domain.

## What this RTL does not contain

These parts of the full system are represented only by the top's ports:

- PCIe link to the host;
- DDR3 memory controllers and DRAM;
- the clock-crossing, width-converting FIFOs between them;
- host software.

The memory-side command logic, which would watch `fetch_mat` and stream
matrices from DRAM, is not included. The testbenches play that role.

## Resource footprint at the defaults

Pointer and weight ping-pong buffers take 32 channels × 32 PEs × 2 buffers
× 2 banks × 512 × 16 bits = 4 MB. Each PE also has a 9 × 32 × 32-bit Act
Buffer.

The step latency is set by the busiest PE's stream length summed over the
nine matrices, plus one cycle per column and the element-wise passes (64
cycles each at 16 lanes).

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- **Unit tests.** Most unit tests compare against an independent model
  under random traffic, with deliberately small depths so that full, empty,
  stall and bank-swap conditions occur often.
- **Arithmetic units.** These are checked exhaustively or with random
  operands.
- **`tb_ese_top`.** Runs three LSTM steps on a reduced instance: 2 channels
  × 4 PEs, 128 cells, 24 inputs, 16 projections, 4 lanes, depth-2 FIFOs,
  128-entry banks. It:
  - generates random sparse weights with deliberately uneven density per PE;
  - encodes them in the relative-index format, with gap and tail padding;
  - streams them in schedule order;
  - checks every y value against a bit-exact model of the fixed-point LSTM.

  It also checks that:
  - the number of MAC cycles equals the number of encoded entries;
  - the step latency lies within bounds;
  - every scheduler state, ActQueue stall, FIFO wait, bank swap, gap pad
    and tail pad actually occurred.

  One step takes 1481 cycles at that size.
- **Full size.** No testbench at the default size is included. A version
  of the end-to-end test at the defaults (32 × 32 PEs, 1024 cells) took
  about 11 minutes to compile with Verilator and over 15 minutes to
  simulate. It did not finish its two steps within its 400,000-cycle
  watchdog, which points to the stream deadlock described above: its
  deliberately uneven per-PE densities (9–13 %) give skews of several
  hundred entries per matrix. This has not been resolved. The largest
  configuration verified end to end is the reduced one above. At the
  defaults, only compilation (lint and elaboration) is verified.

To simulate with plain Verilator, the package goes first:

```
verilator --binary --timing --assert --top-module tb_ese_top \
    rtl/ese_pkg.sv $(ls rtl/*.sv | grep -v ese_pkg) tb/tb_ese_top.sv
./obj_dir/Vtb_ese_top
```

Replace `tb_ese_top` with any other testbench name to run that test.

## Departures and choices

**Follows the original architecture:**

- channel/PE organisation and sizes;
- row interleaving;
- the 12+4-bit relative-index CSC format with zero padding;
- ActQueue FIFOs of depth 8 and 512-word ping-pong buffers;
- the 16×12 PE multiplier and 16 element-wise multipliers per channel;
- the 4-input adder tree;
- 2048-point interpolated sigmoid/tanh tables with their input ranges;
- all binary points;
- the state/phase schedule;
- the 8×16-bit output packing.

**This design's own choices:**

- the bit order of an entry (index in the low nibble);
- 32-bit partial sums;
- the tail-padding stream format and its drain;
- the ping-pong hand-over rules;
- one-cycle column opening;
- Act Buffer organisation (one region per matrix with written flags);
- two ElemMul arrays per channel instead of one, so c is formed in one pass;
- truncating alignments;
- the vector-write port;
- the phase-completion handshake;
- tanh for g.
