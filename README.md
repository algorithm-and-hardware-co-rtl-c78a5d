# FDHT-LSTM accelerator: HT-layer inference in a 2-D SRAM array

An FDHT-LSTM is a recurrent layer whose entire weight matrix `[W V]`
(the input weights and the recurrent weights of all four gates, stacked) is
replaced by a small hierarchical-Tucker (HT) network. Take a tree of order
d = 4. It has four *leaf frames* U1..U4 and two *transfer tensors* B12 and B34
on the second level, plus a root transfer tensor B1234. The product
`Z = [W V] · [x; h]` then becomes a chain of small dense matrix products. The
catch is the step between two products. There, the intermediate matrix `T`
has to be turned into a permuted matrix `T'`: indices move between the row
and column dimensions in ways that are not simple reshapes.

This RTL implements the accelerator that evaluates such a chain. Its central
idea is that no separate transpose is needed. Every product is written into
a banked "2-D SRAM array", and the write pattern is chosen so that reading
the array back in plain address order yields `T'`. An assemble unit cuts
each read into rows of `T'`. A 16 × 16 MAC array multiplies those rows by the
next weight factor.

## 1. The computation chain

Let the input be shaped `I1×I2×I3×I4` and the output `O1×O2×O3×O4`. Let the
leaf rank be `r` and the non-leaf ranks `r34` and `r12`. One layer evaluation
is then the following eight steps. Each step multiplies `T'` (rows × kred) by
a weight matrix `B'` (kred × N).

| step | read type | X (banks) | K (segment depth) | Z (words) | N (product columns) | weight |
|------|-----------|-----------|-------------------|-----------|---------------------|--------|
| 0    | II        | 1         | 1                 | I4        | O4·r                | U4'    |
| 1    | I         | O4        | 1                 | r         | r34·r               | B34'   |
| 2    | II        | I3        | O4·r34            | r         | O3                  | U3'    |
| 3    | III       | I2        | O4·r34            | O3        | O2·r                | U2'    |
| 4    | I         | O2        | 1                 | r         | r12·r               | B12'   |
| 5    | II        | I1        | O4·r34·O3·O2·r12  | r         | O1                  | U1'    |
| 6    | III       | r12       | 1                 | O1        | r12 (identity)      | I      |
| 7    | II        | r34       | O4·O3·O2·O1       | r12       | 1                   | B1234' |

The last transformation collects both non-leaf rank indices into the
columns. It is not a single instance of any of the three transformation
types. This design therefore does it in two steps. Step 6 is a Type-III read
multiplied by an identity matrix (1.0 = 256 in the Q8 weight format), which
moves `r12` to the columns. Step 7 is a Type-II read, which then also brings
`r34` over.

The chain and the reference model that checks it are in `tb/fdht_ref.svh`
(`build_chain`). The hardware itself knows nothing of HT trees. It executes
whatever list of step descriptors the host loads.

## 2. How a permutation becomes an address pattern

### The array

A working-memory copy has G = 14 banks. Each bank is M = 2048 rows of
256 bits, i.e. 16 words of 16 bits (`working_sram_array`, `working_sram_bank`).
Each bank is logically cut into segments of depth D. A storage location is
written S(x, y, k, z): bank x, segment y, row k inside the segment, word z
inside the row. All banks are always read at the same row address.

### One formula for all writes

Every matrix is stored in one of three layouts, and all three are instances
of one rule. An element at flat row-major position `f = row·N + col` goes to

```
f = ((y·X + x)·K + k)·Z + z          (all indices from 0)
bank = (y div nseg)·X + x
row  = (y mod nseg)·K + k            nseg = floor(M / K) segments per bank
word = z
```

So `Z` words form a *group*. `K` groups fill a segment (the segment depth D is
K). `X` consecutive segments go to `X` consecutive banks. The remaining index
`y` walks down the segments. `wr_addr_gen` evaluates this mapping
combinationally with dividers.

For a transformation `T → T'` the layout is chosen from the shape of `T`:

* **Type I**, `A×(B1·B2) → (A·B1)×B2`: X = B1, K = 1, Z = B2. One row of `T`
  is spread over B1 banks at the same address.
* **Type II**, `(A1·A2·A3)×(B1·B2) → (A1·A3·B1)×(A2·B2)`: X = A2,
  K = A3·B1, Z = B2.
* **Type III**, `(A1·A2·A3)×B → (A1·A3·B)×A2`: X = A2, K = A3, Z = B.

### Reading

The read side is only a counter (`rd_addr_gen`). For each segment y in turn,
it reads rows k = 0..K-1 of all banks at once. One read returns the K-th
group of X banks side by side. The assemble unit turns that read into rows of
`T'`:

* Type I gives X rows of Z words: row i is the group in bank i.
* Type II gives one row of X·Z words: the groups are concatenated.
* Type III gives Z rows of X words: row j is word j of every bank.

This works because reading walks (y, k) in order while x and z sit side by
side in one read. The write rule has therefore moved the x index (A2) from
the rows of `T` to the columns of `T'`. A short check for Type II: element
`T'((a1·A3 + a3)·B1 + b1, a2·B2 + b2)` is read at y = a1, k = a3·B1 + b1, from
bank a2, word b2. That is exactly where the writer put
`T(a1·A2·A3 + a2·A3 + a3, b1·B2 + b2)`.

### Bank-group folding

A matrix may need more segments than one bank provides (Y > nseg). In that
case segment y continues in the next *bank group*: banks X..2X-1, then
2X..3X-1, and so on. The read counter runs through nseg·K rows of one group,
then moves to the next group. This lets small-X layouts use all 14 banks. A
matrix must still satisfy `ceil(Y / nseg)·X ≤ G`. The controller asserts that
no write falls outside the array (`a_no_overflow`).

### Where this departs from the source description

* The rule in the source sends consecutive rows of `T` to consecutive
  *banks*. One sentence of its text instead names the second segment of the
  first bank for row 2. The worked figure shows row 2 in the second bank, and
  this design follows the figure.
* Folding into bank groups, and the single formula above, are this design's
  own. The source describes each type separately and does not say what
  happens when a matrix is deeper than one bank.

## 3. Assemble unit

`assemble_unit` holds one read of all banks in a register file of
14 × 16 words (448 bytes). It hands out rows of `T'` on a valid/ready port.
Row words beyond the row length are zero, so the PE array can always consume
a row as a vector of up to 224 words.

Reads are pipelined. The SRAM banks keep their output register when no read
is issued. A read that arrives while the register file still has rows
waiting therefore simply stays in the banks' output registers. It is loaded
in the cycle the last row is taken. As a result:

* Type II delivers one row per cycle after two cycles of latency.
* Types I and III deliver X or Z rows per read, also back to back.

## 4. Datapath

`pe_array` has 16 PEs (`pe`). Each PE has 16 multipliers (16 × 16 bits) and
16 accumulators of 24 bits, giving 256 MACs per cycle. The dataflow is an
outer product. In each cycle PE p receives one activation, `T'[r0+p][k]`. All
PEs share the same 16 weights, `B'[k][c0..c0+15]`. PE p, MAC m then
accumulates `T'[r0+p][k]·B'[k][c0+m]`. After `kred` cycles the 16 × 16 output
tile is complete.

The number format is this design's own. Data and weights are signed 16-bit.
Each 32-bit product is shifted right by 8 bits (weights carry 8 fraction
bits) before it is added. The accumulator saturates at ±2^23. When a tile is
written back, the accumulator is shifted right by a per-step amount and
saturated to 16 bits. `sat` pulses whenever an accumulator clips.

## 5. Controller and schedule

`main_controller` holds up to eight step descriptors (`step_t` in
`fdht_pkg`):

| field      | meaning |
|------------|---------|
| `rd_type`  | Type I / II / III assembly of this step's operand |
| `rd`       | layout (X, K, Z, nseg) in which the operand was written |
| `rd_reads` | number of array reads, Y·K = elements / (X·Z) |
| `wr`       | layout for this step's product (= the next step's `rd`) |
| `ncols`    | N, columns of the product (≤ 256) |
| `wbase`    | first weight row of B' |
| `shift`    | requantisation shift |
| `last`     | stream the product to the host instead of storing it |

For each step the controller repeats the following for every block of up to
16 rows of `T'`:

1. **LOAD.** Copy up to 16 rows from the assemble unit into an operand stage
   (16 × 224 words). This takes one cycle per row.
2. **COMPUTE.** For every 16-column tile of the product, run `kred` cycles.
   Each cycle feeds one column of the stage and one 16-wide weight row, then
   waits one cycle for the last MAC.
3. **DRAIN.** Requantise the tile and write it into the other working copy.
   Each write covers the run of consecutive elements that lies inside one
   Z-word group of the write layout, with a word mask, at the address given
   by `wr_addr_gen`. When tiles and groups line up, that is one write per
   group. For the last step, one element per cycle goes to the host on
   `out_valid/out_idx/out_data` instead.

Step s reads copy s mod 2 and writes copy 1 − s mod 2 (ping-pong). The host
writes the input into copy 0. The PE array is enabled for exactly
`Σ ceil(rows/16) · tiles · kred` cycles per layer, and every enabled cycle
does 256 MACs. LOAD, COMPUTE and DRAIN are not overlapped, so the array is
idle during load and drain. On the reduced full-size test (section 7), 32,128
of 81,801 cycles are compute cycles.

Weight row `wbase + c·kred + k` holds `B'[k][16c .. 16c+15]`, zero-padded
past N. The weight SRAM has 8808 words organised as 16 lanes of 551 rows
(`weight_sram`), so one read feeds all 16 MACs of every PE.

## 6. Using the top level

`fdht_top` has these ports. All are synchronous to `clk`, and reset
(`rst_n`) is asynchronous and active low.

* `w_we, w_addr, w_lane, w_data` write one weight word while idle.
* `cfg_we, cfg_idx, cfg_step` write a descriptor. `nsteps` gives the chain
  length.
* `in_valid, in_idx, in_data` write input element `in_idx` (flat row-major)
  while idle. The element is placed in the layout of step 0 (`steps[0].rd`).
* `start` runs all steps. `busy` stays high until `done` pulses for one
  cycle. During the last step `out_valid` marks each result element, with
  its flat row-major index on `out_idx`.

The host has to supply the bias, the sigmoid/tanh nonlinearities and the
cell-state update of the LSTM. The accelerator returns `Z = [W V][x; h]`.
No hardware for the gate nonlinearities is modelled.

Defaults: G = 14, M = 2048 rows of 256 bits per bank, two copies
(2 × 917,504 bytes; the published capacity figure of 875 KB per copy does not
match its own bank dimensions, which are followed here), 8808 weight words, 16 × 16 MACs. These are the
sizes of the published design.

### What fits

The chain places hard limits on a layer:

* every product must fit one working copy (458,752 words);
* X ≤ 14 banks per group and K ≤ 2048 rows per segment;
* rows of `T'` are at most 224 words, and N ≤ 256;
* the padded weight rows of all steps must total at most 551.

The video-recognition layers the design was sized for (input 16×16×16×15,
output 4×4×4×4, leaf rank 14, non-leaf rank 12 or 11) break these limits in
this mapping:

* the product after the first transfer tensor has 16·16·16·4 × 168 =
  2,752,512 words, six times one copy;
* steps 2 and 3 need X = 16 banks;
* step 5 needs segments of 9,216 (or 7,744) rows;
* the tile-padded weights need about 1,000 rows.

The source states the memory sizes but not how it maps such layers onto them.
Of those layers, only the first step (X' × U4', 4096 × 15 times 15 × 56) runs
at full size (`tb_fdht_ucf11`). The largest complete layer simulated at
default sizes is I = 8×8×8×15, O = 4×4×4×4, leaf rank 14, non-leaf rank 4
(`tb_fdht_full`).

## 7. Verification

Each module has a self-checking testbench in `tb/`. Each one ends by
printing `TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|-----------|----------------|
| `tb_working_sram_bank` | masked writes and one-cycle reads against a shadow copy |
| `tb_working_sram_array` | writes hit only the addressed bank; all banks read together |
| `tb_weight_sram` | full-size 551 × 16 memory, lane writes, row reads |
| `tb_wr_addr_gen` | small worked examples plus every element of random layouts, walked with counters (folding, room, overflow) |
| `tb_rd_addr_gen` | address/group sequence and one read per `next` |
| `tb_assemble_unit` | Type I/II/III rows from random bank groups, stalls, and the one-row-per-cycle rate |
| `tb_pe`, `tb_pe_array` | MACs against a 64-bit model, saturation, 256 MACs per enabled cycle |
| `tb_main_controller` | a two-step chain with the read path and memories modelled: host load, product placement in copy 1 across two bank groups, one write per group run, ping-pong, streamed output, PE-cycle count |
| `tb_fdht_top` | the eight-step chain of a small layer with 64-row banks. It counts every mechanism (Type I/II/III rows, folding, stalls, partial group writes, multi-tile products, saturation, both copies) and fails on any that never occurs |
| `tb_fdht_full` | the eight-step chain at the default sizes (I = 8×8×8×15, O = 4×4×4×4); all 256 outputs compared with the reference |
| `tb_fdht_ucf11` | the first step of the full-size video layer (61,440 inputs, 229,376 outputs) at the default sizes |

The two top-level tests compare against `tb/fdht_ref.svh`. That model
permutes matrices with the index formulas of the three transformation types,
not with the bank/row mapping. It therefore checks the address scheme
independently.

Run a test with Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
    rtl/fdht_pkg.sv tb/tb_fdht_full.sv --top-module tb_fdht_full
./obj_dir/Vtb_fdht_full
```

The package is named first; the modules are found in `rtl/` by name. The
full-size test builds in about 10 s and runs in under a second. The unit
testbenches are built the same way with their own top module.

## 8. Differences from the published design

* **Direct path.** The published block diagram also shows a direct path from
  the working SRAM to the PE array that bypasses the assemble unit. Here every
  read goes through the assemble unit. A read with no permutation is a Type-II
  read with X = 1, which passes one group through as one row.
* **Schedule.** Operand loading, computation and write-back take turns (see
  section 5). The published design claims high multiplier utilisation, but its
  schedule is not given, so none is copied here.
* **Number format.** Only "16-bit data, 24-bit accumulators" is given. The
  product scaling and the requantisation are this design's own.
* **Weight memory shape.** The weight memory has the published capacity
  (8808 words). It is shaped 16 words wide rather than 16 bits wide.
* **Layer sizes.** The layer sizes of the published evaluation do not fit
  this mapping at the default sizes (section 6).
* **LSTM gate arithmetic.** Gate nonlinearities and the cell update are not
  modelled.
* **Memories.** The memories are behavioural arrays, not SRAM macros. Clock
  rate, area and power are not modelled.

## 9. Source files

`rtl/fdht_pkg.sv` holds the sizes, the layout and descriptor types and the
arithmetic helpers. The rest of `rtl/` contains one module per file:
`fdht_top`, `main_controller`, `wr_addr_gen`, `rd_addr_gen`,
`assemble_unit`, `pe_array`, `pe`, `weight_sram`, `working_sram_array`,
`working_sram_bank`. The memories are behavioural arrays, which synthesis
maps to flip-flops or inferred RAM. For silicon they would be replaced by
SRAM macros with the same ports.
