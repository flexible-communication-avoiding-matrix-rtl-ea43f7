# Communication-avoiding matrix multiplication: a 1D PE chain in SystemVerilog

This kernel computes `C = A * B` and reads as little off-chip data as it can
for the on-chip memory it has. It keeps one large block of C, the *memory
tile* of `X_TOT x Y_TOT` elements, on chip. It then sweeps through the whole
common dimension `k` as a series of outer products. At step `k`, column `k` of
A (restricted to the tile's rows) is multiplied by row `k` of B (restricted to
the tile's columns). The product is added to every element of the tile. Each
element of A is therefore read once per column tile, and each element of B
once per row tile. Total traffic is

    Q = m*n * (1 + k * (1/X_TOT + 1/Y_TOT))      elements,

which is smallest when the tile is as large and as square as the on-chip
memory allows. The design follows the architecture published by de Fine
Licht, Kwasniewski and Hoefler ("Flexible Communication Avoiding Matrix
Multiplication on FPGA with High-Level Synthesis", FPGA 2020). That
architecture was written in HLS C++. This is an independent register-transfer
implementation of it. Where the publication leaves a detail open, the choice
made here is stated below and in the header comment of each file.

The defaults are those of the paper's unsigned 32-bit kernel:

- 202 processing elements (PEs) with 8 multiply-add units each, giving 1616
  multiply-adds per cycle;
- a 1212 x 1360 tile, which is 52.7 Mbit of on-chip buffer;
- 512-bit memory words.

## Structure

```
            +--------+   16 FIFOs   +-----------+  A chain (value + PE tag)
 memory --> | Read A | ===========> | Transpose | ---------------------+
            +--------+              +-----------+                      |
                                       ^ row_start / group_done        v
            +--------+   beats     +--------+  B chain (Y_C elems)  +------+    +------+         +--------+
 memory --> | Read B | ----------> | Feed B | --------------------> | PE 0 | -> | PE 1 | -> ...  | PE N-1 |
            +--------+             +--------+                       +------+    +------+         +--------+
                                       ^ tile_drained                  |  ^ C drain (valid/ready)
            +---------+                |                               v  |
 memory <-- | Write C | <--------------+-------------------------------+  +-- ... <-- PE N-1
            +---------+
```

| File | Role |
|---|---|
| `rtl/mmm_pkg.sv` | default sizes, the B-chain control struct, and state enums |
| `rtl/mmm_kernel.sv` | top level: sizes, tile counts, and wiring of the chain |
| `rtl/read_a.sv` | reads A as 512-bit row-major words and scatters each word's elements into the FIFO bank |
| `rtl/stream_fifo.sv` | first-word-fall-through FIFO; used for the A FIFO bank and the PE drain queues |
| `rtl/transpose.sv` | pops the FIFOs column by column and sends A into the chain, paced by Feed B |
| `rtl/read_b.sv` | reads the B row segment of each step and cuts words into beats of `Y_C` elements |
| `rtl/feed_b.sv` | double-buffers B rows, streams them into the chain, and sequences tiles |
| `rtl/mmm_pe.sv` | one PE: A double buffer, B pass-through, accumulation, and drain |
| `rtl/compute_unit.sv` | one multiply-add |
| `rtl/c_buffer.sv` | a PE's slice of the tile (simple dual-port RAM) |
| `rtl/write_c.sv` | packs drained beats into words and writes them to C |

Derived sizes used throughout:

| Symbol | Meaning | Default |
|---|---|---|
| `EPW = MEM_BITS/W` | elements per memory word | 16 |
| `R = X_TOT/N_P` | tile rows owned by each PE | 6 |
| `MB = Y_TOT/Y_C` | beats per tile row | 170 |
| `R*MB` | words in each PE's C buffer | 1020 |

## How a tile is computed

PE `i` owns the tile rows `r` with `r mod N_P = i`. The rows are handled in
groups of `N_P`, one row per PE. For each step `kk` of the tile and each group
`g` (there are `R` groups), the following happens:

1. Transpose sends one A value per PE into the chain: `A[tile_row0 + g*N_P + i][kk]`
   for `i = 0..N_P-1`. Each value carries the index of the PE it belongs to.
   A PE keeps the value addressed to it and forwards the others.
2. Feed B streams row `kk` of B (`MB` beats of `Y_C` elements) into PE 0.
   Each beat moves one PE further along the chain every cycle. PE `i` sees the
   row `i` cycles after PE 0 does.
3. Every PE multiplies each beat by its A value and adds the result into its
   C buffer. The buffer address advances by one per beat and wraps after
   `R*MB` beats. That is exactly one pass over the PE's share of the tile per
   step `kk`.

Feed B streams the same B row `R` times, once per group. Meanwhile it fills
its second buffer with the next row. This is why B needs a double buffer of
`2*Y_TOT` elements, and only at the head of the chain.

### A double buffering and the pacing of the chain

Each PE holds one spare A value (`a_next`) beside the one in use (`a_cur`).
The first beat of every row carries the control bit `first_row`. That beat
copies `a_next` into `a_cur` in the same cycle it is used. This lets the next
group's values travel down the chain while the current row is still being
computed.

One spare slot per PE means group `g+1` must not enter the chain before PE 0
has started row `g`. Otherwise a value would overwrite a slot that has not yet
been consumed. Transpose enforces this with a credit counter:

- the counter starts at 1;
- it goes up by 1 on every `row_start` from Feed B;
- it goes down by 1 for every group sent.

Feed B, in turn, starts a row only when the group for that row has been
completely sent (`group_done`). A group takes `N_P` cycles to enter the chain,
and its last value needs about `N_P` more hops to reach its PE. A row start
therefore needs about `N_P + 2` cycles after the previous one.

**Consequence:** the chain runs without gaps only when `MB = Y_TOT/Y_C >= N_P + 2`.
At the default uint32 sizes, `MB = 170` and `N_P + 2 = 204`. Feed B then stalls
for 34 cycles per row, and compute efficiency is about 83%. The paper reports
its throughput without such a loss. Its text, however, specifies a single
double-buffered A value per PE, and that is what is built here. The `stall`
output of Feed B (`fb_stall` inside the top) shows when this happens. Choosing
`Y_TOT/Y_C >= N_P + 2` avoids it. The FP32 sizes of the paper, for example,
give `1632/8 = 204 >= 194`.

### Accumulation pipeline

The PE reads the C buffer in the cycle a beat arrives. It multiplies and adds
in the next cycle and writes the sum back. The same address comes back only
after `R*MB` beats, so the write never collides with a pending read as long as
`R*MB >= 2`. On the first step of a tile, the `first_k` bit makes the compute
units store `a*b` instead of `c + a*b`. The buffer is therefore never cleared
explicitly.

### Choice of operation: ordinary or distance product

Nothing in the schedule depends on the arithmetic. Only the compute unit
knows it. The `OP` parameter of `mmm_kernel` (passed down to every PE and
compute unit) selects between two operations:

- `OP_MUL_ADD`, the default: the ordinary product, `c = c + a*b`;
- `OP_ADD_MIN`: the distance (min-plus, tropical) product, `c = min(c, a+b)`.

The distance product is what a shortest-path step needs. In both modes the
first step of a tile stores the combined value (`a*b` or `a+b`) without
reading the buffer. Sums wrap modulo `2^W` in both modes.

### Draining a tile

After the last beat of the last step (the `last_tile` bit), every PE holds
`R` finished rows. Write C must receive them in tile row order: row 0 from
PE 0, row 1 from PE 1, and so on. The drain runs backwards through the chain.
For each of its `R` rows, PE `i`:

1. sends its own row (`MB` beats);
2. forwards the `N_P-1-i` rows that arrive from the PEs behind it.

Rows from the back of the chain thus fill in behind each PE's own row. PE 0
emits rows in order at one beat per cycle. The drain path has valid/ready on
every hop and a 4-entry queue in each PE, so back-pressure from memory stops
the whole drain without loss.

The drain is not overlapped with computing the next tile. Keeping it separate
lets the entire on-chip memory serve a single tile. Feed B waits for Write C's
`tile_drained` pulse before it starts the next tile. A tile takes
`X_TOT*MB` cycles to drain, which is 206,040 cycles at the defaults. The
drain is therefore only a small part of the total when `k` is large. With a
small `k` the drain dominates.

## Memory side

All three channels carry `MEM_BITS`-wide words at word addresses. Matrices are
stored row-major.

- **Read A** issues one request per tile row and group of `EPW` columns, in
  order `(tile, kb, row)`. The address is `a_base + row*k/EPW + kb`. Element
  `e` of each returned word is pushed into FIFO `e`. Transpose then pops FIFO
  0 for all rows of the tile, then FIFO 1, and so on. This turns row-major
  words into the column order the chain needs.
  - Each FIFO must hold a whole column of the tile, so its depth is `X_TOT`.
  - The paper asks only for a depth of at least `x_b*x_m`. A smaller FIFO
    would deadlock with this pop order.
- **Read B** requests row `kk` of the tile's columns:
  - address `b_base + kk*n/EPW + column_word`;
  - each word is split into `MEM_BITS/(Y_C*W)` beats, lowest bits first.
- **Write C** packs beats back into words and writes them to
  `c_base + row*n/EPW + column_word`.
- Up to `MAX_OUT` (32) read requests may be outstanding on each read channel.
  Responses must return in order.

**Partial tiles.** `m` can be any size. Rows past `m-1` re-read row `m-1`, and
Write C drops their results. `n` and `k` must be multiples of `EPW`. In a
partial column tile, words past the last column re-read the last word, and
Write C drops them as well.

## Parameters

| Parameter | Default | Notes |
|---|---|---|
| `W` | 32 | element width (unsigned integer) |
| `Y_C` | 8 | compute units per PE (elements per beat) |
| `N_P` | 202 | PEs in the chain |
| `X_TOT` | 1212 | tile rows; must be a multiple of `N_P` |
| `Y_TOT` | 1360 | tile columns; must be a multiple of `EPW` and of `Y_C` |
| `MEM_BITS` | 512 | memory word; a multiple of `Y_C*W` |
| `ADDR_W` | 32 | word address width |
| `A_FIFO_DEPTH` | `X_TOT` | depth of each A FIFO |
| `MAX_OUT` | 32 | outstanding reads per channel |
| `OP` | `OP_MUL_ADD` | `OP_ADD_MIN` for the distance product |

The paper's other integer kernels are parameter changes only:

- uint16: `W=16, Y_C=16, N_P=210, X_TOT=1680, Y_TOT=2048`;
- uint8: `W=8, Y_C=32, N_P=132, X_TOT=1980, Y_TOT=2176`.

`mmm_kernel` checks the divisibility rules with assertions at elaboration
time.

## Departures from the paper

- **Arithmetic.** The compute unit is an unsigned multiply-add modulo `2^W`.
  The paper's half, single and double precision kernels depend on vendor
  floating-point operators, which are not built. A floating-point kernel
  needs a pipelined FP multiply-add in `compute_unit`. It also needs the C
  buffer read-to-write distance raised to the adder latency.
- **A chain stalls** when `Y_TOT/Y_C < N_P + 2`, as explained above. This
  includes the default uint32 configuration.
  - The paper states its pipelining condition differently. It requires only
    that the number of compute tiles per outer product be at least the
    number of PEs.
  - With one spare A value per PE, that is not sufficient. What matters is
    that one PE row (`Y_TOT/Y_C` beats) is longer than the time the chain
    takes to deliver a new group of A values.
- **A FIFO depth** is `X_TOT`, not the `x_b*x_m` the paper states.
- **Module count.** The paper's text counts 4 + N_P modules. Its layout
  figure draws five non-PE modules (Read A, Transpose, Read B, Feed B,
  Write C), and those five are built.
- **Only the 1D chain** (`x_c = 1`, `y_p = 1`) is built. The paper fixes
  these values too. The general 2D compute grid it uses to derive the chain
  is not implemented.
- **Interfaces, handshakes, control bits and reset** are this design's own.
  The paper does not describe them. Reset is asynchronous and active low and
  applies to control state only. Data storage is not reset.
- **Input layouts.** A and B must both be row-major. The original
  implementation can be configured for A stored transposed, which needs no
  on-the-fly transpose, and for B stored transposed, which needs one. Neither
  variant is built here.
- **Loop order.** The variant with `k` as the innermost loop is not built.
  That variant suits pipelined accumulators and changes the memory access
  pattern.
- **Drain overlap.** The drain is a separate phase, as in the paper. No
  attempt is made to overlap it with computation.

## Verification

Every block has a self-checking testbench. Each one ends by printing
`TB_RESULT checks=N failures=M`, and each has a cycle watchdog.

| Testbench | What it covers |
|---|---|
| `compute_unit_tb` | random and corner vectors against a 64-bit reference |
| `c_buffer_tb` | random traffic against an array model, read-during-write |
| `stream_fifo_tb` | random push/pop rates against a queue model, full/empty edges |
| `read_a_tb`, `read_b_tb` | request order, partial-tile clamping, and beat order, under random memory back-pressure |
| `transpose_tb` | pop order, PE tags, and the credit rule |
| `feed_b_tb` | row repetition, control bits, stalls on missing A, and waiting for the drain |
| `write_c_tb` | packing, addresses, dropped words, and `tile_drained`/`done` pulses |
| `mmm_pe_tb` | a chain of three PEs over two tiles, checked against a software product |
| `mmm_kernel_tb` | end to end at `N_P=4, Y_C=2, 8x8` tiles |
| `mmm_kernel_ksweep_tb` | efficiency against k: m and n fixed at 16 x 32, k = 4 to 128, on a build with `Y_TOT/Y_C >= N_P+2`; cycle counts against the model, and no stalls |
| `mmm_kernel_minplus_tb` | the distance-product build end to end, with partial tiles and back-pressure |
| `mmm_kernel_full_tb` | the default kernel, m=1212, n=1360, k=16 |

`mmm_kernel_tb` runs three products, given as m x n x k: 8x8x12, 13x20x8 with
partial tiles, and 16x16x20 with multiple tiles, the last two with random memory back-pressure.
It compares every word of C with a reference and checks that no write falls
outside C. On the first product, which runs without back-pressure, it also
bounds the cycle count. The testbench counts how often each mechanism occurs
and fails if any of them never occurs:

- Feed B stalls;
- A swaps;
- `first_k` initialisations;
- drained beats;
- drain back-pressure;
- dropped words;
- B refills overlapping computation;
- tiles;
- forwarded drain rows.

`mmm_kernel_ksweep_tb` shows the cost of draining tiles as a separate
phase. A run takes `m*n*k/N_c` cycles of computing plus `m*n/Y_C` cycles of
draining, and the only other overhead it measures is about 11 cycles per
tile. Efficiency is 0.46 at k = 4 and rises to 0.93 at k = 64 and to 0.97 at
k = 128.

`mmm_kernel_full_tb` takes about 226,000 cycles. Most of them are the drain of
the full 1212 x 1360 tile. All 1,648,320 elements of C are checked.
`tb/mem_model.sv` is the behavioural memory used by the kernel-level
testbenches. It has random ready and valid delays and in-order responses.

Simulating with Verilator 5, for example the end-to-end test:

```
verilator --binary --timing -Wno-fatal -j 0 --top-module mmm_kernel_tb \
    rtl/mmm_pkg.sv rtl/*.sv tb/mem_model.sv tb/mmm_kernel_tb.sv
./obj_dir/Vmmm_kernel_tb
```

Unit testbenches need only the package, their module, and any sub-modules
it uses (`mmm_pe` uses `compute_unit`, `c_buffer` and `stream_fifo`). The
full-size build takes a few minutes to compile.
