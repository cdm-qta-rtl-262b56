# CDM-QTA: an INT8 training accelerator for LoRA fine-tuning of diffusion models

This is synthesizable SystemVerilog for the accelerator architecture described in
"CDM-QTA: Quantized Training Acceleration for Efficient LoRA Fine-Tuning of Diffusion Model"
(J. Lu, M. She, W. Mao, Z. Wang). It is an independent implementation written from that
description, not the authors' code.

Custom Diffusion fine-tunes only the key and value projections of the cross-attention layers.
LoRA shrinks that further: each trainable projection `W` gets a low-rank update, so a layer
computes `Y = X·W + (X·A)·Bᵀ` with rank `r` much smaller than the layer width. All weights,
activations and gradients are quantized to INT8, so every step of training becomes an
integer matrix product (GEMM). These GEMMs come in very different shapes:

* Text-side operands are short. The text sequence has fewer than 77 tokens.
* Image-side operands are long. The image sequence has 4096 tokens.
* The LoRA factors are only `r` wide.
* The weight gradients reduce over the whole sequence.

A single fixed dataflow wastes much of an array on some of these shapes. The main idea of
the design is therefore one 64 × 64 multiply-accumulate array that can run either of two
dataflows. Software picks one per GEMM:

* **weight stationary (WS)**: a 64 × 64 weight tile sits in the PEs, and input rows stream
  through it. This suits long sequences against a full weight tile.
* **output stationary (OS)**: a 64 × 64 block of outputs sits in the PEs, and the reduction
  dimension streams through as a sequence of outer products. This suits thin operands and
  long reductions, such as `q(X·A)ᵀ·dY`.

## Architecture

```
            DRAM side (ext_* ports of the top)
     |                  |                    ^
     v                  v                    |
+-----------+   +---------------+   +-----------------+
| IAct mem  |   | Weight mem    |   | OActs mem       |     all three: two banks,
| 512 KB    |   | 512 KB        |   | 1 MB            |     one for the array,
| 64 x INT8 |   | 64 x INT8     |   | 64 x INT32      |     one for the DRAM side
+-----------+   +---------------+   +-----------------+
     | a_vec          | w_vec               ^ out_vec (write or accumulate)
     v                v                     |
+--------------------------------------------------+      +------------+
| compute module: input skew -> 64 x 64 PE array   | <--- | controller | <-- instructions
|                 -> output alignment (WS only)    |      +------------+
+--------------------------------------------------+
```

| Block | Module | What the source gives | Size here |
|---|---|---|---|
| PE | `pe` | WS weight register, systolic hops, OS temporal accumulation | INT8 × INT8 into 32 bits |
| PE array | `pe_array` | N × N, N = 64 | 64 × 64 |
| input skew / output alignment | `skew_buffer` | "outputs ... aligned to form output vectors" | 64 lanes |
| compute module | `systolic_array` | GEMM in both WS and OS | 64 × 64 |
| weight, IAct, OActs memories | `dbuf_mem` (three instances) | 512 KB, 512 KB, 1 MB, double buffered | as given |
| control module | `controller` | "receives instructions and configurations" | own instruction set |
| top | `cdm_qta_top` | block diagram | |
| shared types | `cdm_qta_pkg` | INT8 operands | |

At 400 MHz the array does 64 · 64 MACs per cycle, which is 3.28 TOPS. This matches the peak
throughput the source reports. The array accepts a new input vector (WS) or a new operand
pair (OS) every cycle.

Three parts are outside the RTL:

* **Off-chip DRAM and the DMA engine that moves tiles.** The source does not describe a DMA
  engine. The DRAM side of each memory is a port of the top.
* **The INT8 quantizer.** Quantization uses `S = max|x| / 127` and `q = round(x / S)`, per
  tensor for weights and per column for activations and gradients. The source uses this in
  its training algorithm but never places it in the hardware. The testbenches do it on the
  host side.
* **The choice of dataflow per layer.** The authors make this choice offline with a
  cycle-level simulator.

## How one array runs two dataflows

This is the part of the design that is hardest to see from the block diagram.

### The PE

Each PE has three registers:

* `a_q`: the activation that is forwarded to the right.
* `w_q`: the stationary weight.
* `sum_q`: the WS partial-sum pipeline register in one mode and the OS accumulator in the
  other.

In front of every PE, two 2:1 multiplexers pick where the operands come from:

| | activation into PE (r,c) | weight used by PE (r,c) | `sum_q` next |
|---|---|---|---|
| WS | `a_q` of PE (r,c−1) (registered hop) | own `w_q` | `psum from PE (r−1,c) + a·w` |
| OS | `a_left[r]`, the same wire for the whole row (broadcast) | `w_top[c]`, the same wire for the whole column (broadcast) | `sum_q + a·w` (`os_clear`: `a·w`); with `os_drain`: `psum from PE (r−1,c)` |

The vertical partial-sum links carry results in both modes. In WS they carry the running
sum of the inner product down the column. In OS they form a shift chain that empties the
accumulators out of the bottom row after accumulation. The bottom row is the only array
edge that is connected to the output memory.

### WS timing

Weight loading takes N cycles. One weight row enters at the top per cycle and shifts down,
so the row presented first ends up in the bottom PE row. After loading, PE (r,c) holds
`W[k=r][n=c]`.

One input vector `X[m][0..N-1]` enters per cycle. The input skew buffer delays element `k`
by `k` cycles, so row `k` sees it exactly when the partial sum for the same vector arrives
from row `k−1`. Column `c` of the bottom row therefore finishes vector `m` at `c` cycles
after column 0. The output alignment buffer delays lane `c` by `N−1−c` cycles to line them
up again. A whole output vector `Y[m][0..N-1]` leaves the array **2N − 1 cycles** after its
input vector entered. One vector leaves per cycle.

```
cycle         t      t+1    ...  t+N-1    t+N   ...  t+2N-1
row 0 PEs     X[m][0] in     (sum flows down one row per cycle, right one column per cycle)
row N-1 col 0                    computes  done
row N-1 col c                             computes at t+N-1+c, done t+N+c
aligned out                                               Y[m][*] valid
```

### OS timing

Step `k` broadcasts input word `X[0..N-1][k]` along the rows and weight word `W[k][0..N-1]`
along the columns. PE (r,c) adds `X[r][k]·W[k][c]`. `os_clear` on step 0 starts new sums,
and the reduction length is not limited by the array size. After the last step, N drain
cycles follow. In drain cycle `d` the bottom row presents sum row `N−1−d` and every
accumulator moves down one row. OS needs no skew or alignment, so both buffers are bypassed.

## Memories and double buffering

Each memory is a `dbuf_mem`. It has two equal banks, and its capacity is the total of both:

| Memory | Word | Words (both banks) | Words per bank | Bank-local address |
|---|---|---|---|---|
| IAct | 64 × INT8 = 64 B | 8192 (512 KB) | 4096 | 12 bits |
| Weight | 64 × INT8 = 64 B | 8192 (512 KB) | 4096 | 12 bits |
| OActs | 64 × INT32 = 256 B | 4096 (1 MB) | 2048 | 11 bits |

Bank `sel` belongs to the array. The other bank belongs to the DRAM-side `ext_*` port, which
can read and write it while the array computes. A `SWAP` instruction flips `sel` for any
subset of the three memories. Reads on either side return data one cycle after the request.

The array-side write port of OActs can **accumulate**: each 32-bit lane of the stored word
is replaced by its wrapping sum with the incoming lane. A WS tile reduces over at most 64
elements, so a longer reduction is split into several tiles, and all tiles after the first
set `acc`.

### Data layout

The layout is a software convention. Both instruction types read the same weight layout,
but they read the input activations in different orientations:

| Tile | Input word `i_base + j` | Weight word `w_base + k` | Output word `o_base + m` |
|---|---|---|---|
| WS | row `j` of X: `X[j][0..63]` (one reduction chunk) | `W[k][0..63]`, k < 64 | `Y[m][0..63]` |
| OS | column `j` of X: `X[0..63][j]` | `W[k][0..63]`, k < k_len | `Y[m][0..63]`, m < 64 |

The two layouts make transposed operands free. An OS tile that reads row-major words as
"columns" computes `Xᵀ·dY`, the shape of a weight gradient, with no data reshuffling. The
training testbench uses this for `dW_B = q(X_A)ᵀ·dY` and `dW_A = Xᵀ·q(dX_A)`.

## Instructions

An instruction is one `instr_t`, defined in `cdm_qta_pkg`. It is transferred with a
valid/ready handshake: an offered instruction must stay unchanged until it is accepted.
The controller takes a new instruction only when it is idle.

| `op` | Fields used | Effect |
|---|---|---|
| `OP_WS` | `i_base w_base o_base k_len m_len acc` | loads weight words `w_base..w_base+63` (words `k ≥ k_len` are replaced by zero), streams `m_len` input words, writes `m_len` output words |
| `OP_OS` | `i_base w_base o_base k_len m_len acc` | `k_len` steps, each reading input word `i_base+k` and weight word `w_base+k`, then drains and writes output rows `0..m_len−1` |
| `OP_SWAP` | `swap_mask` (bit 0 IAct, 1 Weight, 2 OActs) | flips the bank select of each selected memory |
| `OP_NOP` | | nothing |

`k_len` below 64 in WS is how the rank-`r` LoRA products run. The weight rows beyond `r`
may hold anything, because they are forced to zero. `m_len` below 64 in OS keeps a partial
output tile from overwriting the words after it. Assertions in `controller` check the
handshake rule and the field ranges (`1 ≤ k_len ≤ 64` in WS, `1 ≤ m_len ≤ 64` in OS).

Cycle counts are counted from the cycle in which the instruction is accepted. `done`
pulses in the first idle cycle after a tile:

* WS: cycle `3N + m_len + 1`. That is N cycles of weight load, `m_len` cycles of streaming,
  the 2N − 1 array latency and 2 cycles of memory and control registers.
* OS: cycle `k_len + N + 1`.

Tiles run one after another, and weight loading does not overlap the previous tile's
streaming.

## Running LoRA training on it

`tb/tb_lora_training.sv` runs one complete training step of a LoRA linear layer. It follows
the quantized training graph of the source (forward, backward, weight gradient):

| GEMM | Dataflow | Notes |
|---|---|---|
| `X_A = X·W_A` | WS | |
| `dX_A = dY·W_Bᵀ` | WS | |
| `dX = dY·Wᵀ` | WS | |
| `dX += q(dX_A)·W_Aᵀ` | WS, `k_len = r`, `acc = 1` | only r weight rows are live |
| `dW_B = q(X_A)ᵀ·dY` | OS, `k_len = M`, `m_len = r` | reduction over the sequence |
| `dW_A = Xᵀ·q(dX_A)` | OS, `k_len = M` | |

Between the two halves, the host reads `X_A` and `dX_A` through the DRAM side, requantizes
them per column and writes them back. `tb/tb_cdm_qta_top.sv` and `tb/tb_cdm_qta_full.sv`
run the forward pass `Y = X·W + q(X·A)·Bᵀ`:

* X·A runs in OS, as a full tile and a partial one.
* X·W runs in WS over two reduction chunks that accumulate.
* The `k_len = r` correction runs in WS.
* Bᵀ is loaded into the idle bank while the WS tiles run.

### Capacity at the default sizes

The sequence lengths come from the source. The layer widths (768-wide text embeddings,
320–1280-wide projections) are typical of Stable Diffusion v1 and are not stated by the
source.

* **Text embeddings.** 77 × 768 INT8 (59 KB) fits in one 256 KB IAct bank.
* **A 768 × 1280 projection.** At 983 KB it does not fit in a weight bank at once. It runs
  as 64-column slices of 48 KB, each loaded into the idle bank while the other computes.
* **A 64-wide chunk of a 4096-token image sequence.** It is exactly one IAct bank (4096
  words). Its 32-bit WS output (1 MB) is two OActs banks, so it runs as two tiles of
  `m_len = 2048`.
* **OS tiles.** They reduce over up to 4096 words per bank, enough for a full-sequence
  weight gradient.

## Where this RTL adds to or departs from the source

The source gives the block diagram, the array size, the memory capacities, INT8 operands,
double buffering and a prose description of the two dataflows. Everything below is this
implementation's own choice:

* **Partial-sum width.** It is 32 bits. The source does not give one.
* **OS broadcast.** The OS dataflow figure draws activations and weights hopping from PE to
  PE, while the text says they are broadcast. The RTL follows the text: dedicated row and
  column wires in OS, registered hops in WS.
* **OS drain.** Results stream out of the OS array through the vertical partial-sum links,
  bottom row first, one row per cycle.
* **Input skew.** The WS input skew is added. The source mentions only the output
  alignment.
* **Memory banks.** Each memory's capacity is split into two equal banks. The word width is
  one array row. The contents are not reset.
* **Accumulate on write.** This is in the output memory, and it is how WS reductions longer
  than 64 are split over tiles.
* **Instruction format.** The instruction format, the valid/ready handshake, the
  bank-local addressing, the `k_len` weight-row zeroing and `m_len` output-row masking are
  all this design's own.
* **Reset.** It is asynchronous and active low, for PE and control registers.
* **No DMA engine or quantizer.** Neither is in the RTL, as explained in the Architecture
  section.
* **Area, power and energy.** The source's figures for these (Table I, latency and EDP
  comparisons) come from its own synthesis and simulation flow and are not reproduced here.

## Simulating

All files are IEEE 1800-2017. Each module is in `rtl/<module>.sv`. Every testbench prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/cdm_qta_pkg.sv tb/tb_cdm_qta_top.sv --top-module tb_cdm_qta_top -o sim
./obj_dir/sim
```

| Testbench | Checks |
|---|---|
| `tb_pe` | one PE in WS and OS against integer arithmetic |
| `tb_pe_array` | 5 × 5 grid, host-side skew, WS and OS results at exact cycles |
| `tb_skew_buffer` | both delay directions |
| `tb_systolic_array` | 6 × 6 compute module: WS results, 2N−1 latency, one vector per cycle; OS results and drain order |
| `tb_dbuf_mem` | bank ownership, swaps, concurrent traffic on both sides, accumulate on write, read latency |
| `tb_controller` | every address, strobe and write of WS, OS and swap instructions, and the `done` cycle |
| `tb_cdm_qta_top` | LoRA forward pass on an 8 × 8 array, with counts of each mechanism |
| `tb_cdm_qta_full` | the same forward pass on the default 64 × 64 design with full-size memories |
| `tb_lora_training` | a complete LoRA training step on an 8 × 8 array |

The default-size build takes several minutes to compile, because of the 4096 PEs and
2 MB of memory arrays. It then simulates in well under a second. The smaller testbenches
set `N` and the memory depths through parameters.

To change the array size, set `N` on `cdm_qta_top`. The memory parameters set the number of
words, not bytes, so keep `N × depth` consistent with the capacity you want. To change the
operand or partial-sum width, edit `DATA_W` and `ACC_W` in `cdm_qta_pkg`.
