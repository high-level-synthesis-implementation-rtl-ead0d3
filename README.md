# A three-dimensional systolic array for single-precision matrix multiplication

This RTL computes C = A·B for large single-precision matrices held in external
memory. A systolic array does the arithmetic. It has three dimensions: a plane
of d0i × d0j positions, and d0k/dp layers stacked above that plane. Each
position in each layer holds a small dot-product unit. The array takes a
d0i × d0k tile of A, a d0k × d0j tile of B and a d0i × d0j tile of C, and
returns C + A·B. It can take a new set of tiles every clock cycle.

The array takes d0i·d0k + d0k·d0j values every cycle. External memory cannot
supply that many. So two levels of blocking sit around the array, and each
value read from external memory is used many times from on-chip memory. This
reuse is what keeps a bandwidth-limited array busy at one tile per cycle.

The default parameters give a 28 × 28 × 6 array with one multiply per unit
(dp = 1). That is 4704 multiply-adds per cycle. Seven values of A and seven of
B arrive per cycle.

## The array

### Processing element

A processing element (`systolic_pe`) at plane position (i, j) in layer L does
three things:

- It keeps the dp values of A it received from its left neighbour, and passes
  them on one cycle later. A travels along j.
- It keeps the dp values of B from the neighbour above, and passes them on one
  cycle later. B travels along i.
- It adds its share of the k-sum to the partial sum coming up from layer L−1,
  and sends the result to layer L+1. Its share is the dot product of its dp
  A values and dp B values, covering k = L·dp … L·dp+dp−1.

The dot-product unit (`dot_product_unit`) computes r = z + Σ v_n·w_n. The dp
multipliers are followed by one pipeline register. Then comes a registered
binary adder tree; when dp is not a power of two, the missing lanes are padded
with +0. Then a final adder adds z, which has been delayed to match. The unit's
latency is

    l_dot = 2 + ceil(log2(dp))   cycles (3 for dp = 1).

### Timing through the array

A tile enters the array in one cycle, but each element is needed at a
different time:

| Value | Enters at | Delay (cycles) |
|---|---|---|
| A(i, k) | left edge of row i in layer λ(k) = k / dp | i + λ·l_dot |
| B(k, j) | top edge of column j in layer λ(k) | j + λ·l_dot |
| C(i, j) | bottom layer | i + j + 1 |

The result of C(i, j) leaves the top layer. It is then held for
(d0i−1−i) + (d0j−1−j) cycles so that the whole result tile comes out in one
cycle. The latency from input tile to output tile is the same for every tile:

    l_body = d0i + d0j − 1 + (d0k/dp)·l_dot

This is 67 cycles for the default array.

A valid bit travels alongside each tile. Every register in the array obeys the
global enable `en`. A stall therefore freezes the whole wavefront, and no data
is lost.

The skew and de-skew shift registers at the faces are this design's own. The
activation pattern they produce is the one the paper draws for a 3 × 3 × 3
array: a PE starts at time i + j in the bottom layer, and each layer starts
l_dot later than the one below it.

## Two-level blocking and data reuse

The reuse ratios follow from how many values of A and B arrive per cycle
(B_gA and B_gB):

    r_A = d0i·d0k / B_gA      r_B = d0j·d0k / B_gB

A block of C is d1i × d1j, where d1i = r_B·d0i and d1j = r_A·d0j. This block is
a grid of r_B × r_A tiles. The k dimension is walked in steps of d0k. At each
step:

- The d1i × d0k column block of A is loaded, B_gA values per cycle. This takes
  NT = r_A·r_B cycles.
- In the same number of cycles, the d0k × d1j row block of B is loaded,
  B_gB values per cycle.
- Each of the NT tile products uses every A value r_A times and every B value
  r_B times. This exactly matches the arrival rate.

For the defaults: r_A = r_B = 24, d1 = 672 and NT = 576.

Each block of C goes through four phases (`phase` output, enum `phase_e`):

1. **Read** (`PH_READ`). Load k-step 0 of A and B. C will start from zero.
2. **Read + Compute** (`PH_RD_COMP`). Load step k+1 into one half of the
   on-chip memories. At the same time, issue the NT tiles of step k from the
   other half.
3. **Compute** (`PH_COMP`). Issue the last step.
4. **Write** (`PH_WRITE`). Stream the finished block out, d0j values per beat.
   Before this, `PH_DRAIN` waits until the last tiles have left the array.

Phases 1 and 2 both need a beat of A and a beat of B every cycle. If either
beat is missing, `en` goes low and the whole pipeline holds. This is the only
way external memory can slow down the computation. Write runs alone, so a slow
C store (`c_ready` low) only stretches Write.

Blocks are processed with J (the column block) fastest. Within a step, tiles
are issued row-tile by row-tile (ii slow, jj fast).

## On-chip memories

### Mapped memory systems

The mapped memory systems (`mapped_memory`) hold the blocks of A and B:

- A uses d0i·d0k partitions. B uses d0j·d0k partitions.
- Each partition is a plain array of 2·r_B words (A) or 2·r_A words (B): two
  halves for double buffering.
- A write beat carries B_g values. They go to B_g partitions of the same k, at
  one address.
- A read returns one word from every partition, at the same address, after
  one cycle. Together these words form a full tile.
- The write half is k mod 2 and the read half is (k−1) mod 2, so Read and
  Compute never touch the same half.

### C FIFO system

The C FIFO system (`c_fifo_system`, built from `c_fifo`) is d0i·d0j FIFOs, each
r_A·r_B deep, one per element of a tile. While a block is being computed, the
tiles of C circulate: a tile is taken from the FIFO heads, goes through the
array, and is pushed back when it comes out. The first k-step uses zero instead
of the FIFO contents. In Write, one FIFO row (d0j values) is popped per beat.

A tile has to be back in the FIFOs before it is needed again. That requires

    NT = r_A·r_B  ≥  l_body + 2

The top checks this at elaboration. The defaults give 576 ≥ 67. The small test
configuration (4 × 3 × 3, B_gA = 2, B_gB = 1) gives 54 ≥ 12.

### Memory layout

- A is column-major. Element (row, col) is at col·d2i + row.
- B and C are row-major. Element (row, col) is at row·d2j + col.

So each A beat is B_gA consecutive rows of one column. Each B beat is B_gB
consecutive columns of one row. Each C beat is d0j consecutive columns of one
row. The address on each stream is the element address of the beat's first
value.

## Arithmetic

The arithmetic is IEEE-754 single precision in plain logic (`fp32_mul`,
`fp32_add`):

- Rounding is to nearest, ties to even.
- Subnormal inputs and results are flushed to zero.
- Infinities propagate.
- Invalid operations return the quiet NaN 0x7FC00000.

Each dot product adds in a fixed order: pairwise tree, then z, then upward
through the layers. Results are therefore bit-exact against a reference that
adds in the same order. The testbenches compute such a reference with `real`
arithmetic, rounded to single precision after each operation.

## Top level: `mmm3d_top`

### Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `D0I`, `D0J`, `D0K` | 28, 28, 6 | Array size (rows, columns, k per tile) |
| `DP` | 1 | Dot-product length per PE. Layers = D0K/DP |
| `BGA`, `BGB` | 7, 7 | A and B values per load beat. Must divide D0I and D0J |

Derived values: r_A = D0I·D0K/BGA, r_B = D0J·D0K/BGB, and d1i × d1j =
r_B·D0I × r_A·D0J.

To multiply a d2i × d2k matrix by a d2k × d2j matrix:

- d2i must be a multiple of d1i, d2j of d1j, and d2k of d0k.
- Pulse `start` with `n_bi` = d2i/d1i, `n_bj` = d2j/d1j and `n_k` = d2k/d0k,
  each at most 65535. Addresses are 32-bit element indices.
- Wait for `done`.

### Streams

All three streams are valid/ready. A beat transfers on a cycle where both are
high.

- **A and B load streams:** `a_valid`/`a_ready`/`a_addr`/`a_data[BGA]` and the
  same for B. The design drives the address and the source supplies the data.
- **C store stream:** `c_valid`/`c_ready`/`c_addr`/`c_data[D0J]`.

`stall` is high while the pipeline is held.

### Other sizes the RTL is parameterised for

Other array shapes are reached through the parameters. Examples:

- 72 × 32 × 2 with B_g = 8, giving d1 = 576.
- 70 × 32 × 2 with dp = 2, BGA = 7 and BGB = 8, giving d1i = 560 and
  d1j = 640.
- 32 × 32 × 4 or 32 × 16 × 8 with B_g = 8, giving d1 = 512.

## Where this RTL departs from the paper

- **What kind of design this is.** The original is a high-level-synthesis
  kernel. Its pipeline, memory interfaces and stall behaviour come from the
  compiler. Here, those are explicit RTL:
  - one global enable;
  - valid/ready streams with element addresses, in place of burst-coalescing
    load/store units;
  - a drain state before Write.
- **Dot-product latency.** The latency is this design's (2 + log2 dp). It is
  not the vendor DSP chain's.
- **Memory depth.** The mapped-memory depth is exactly 2·r. It is not rounded
  up to a power of two.
- **B_gA and B_gB.** The default of 7 is not printed for the main 28 × 28 × 6
  configuration. It is derived from its 672-wide blocks: 672 = 24·28, and
  24 = 28·6/7.
- **Floating-point details.** Subnormal flushing and NaN encoding are this
  design's choices.
- **Orders.** Tile order and block order are this design's choices.
- **Not included:** the external memory, its controllers, the burst logic and
  the host side.

## Verification and simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The testbenches are:

- **`tb_fp32_mul`, `tb_fp32_add`:** random and special-value operands checked
  against a `real` reference (package `fp_ref_pkg`).
- **`tb_dot_product_unit`:** dp = 4 and dp = 3, random enable stalls. Results
  and the l_dot latency are checked.
- **`tb_systolic_pe`, `tb_systolic_array_3d`:** the array test runs a 3 × 4 × 4
  array with dp = 2 and random stalls. It checks every result tile and the
  l_body latency.
- **`tb_mapped_memory`, `tb_c_fifo_system`:** checked against simple models.
- **`tb_mmm_controller`:** checks the phase sequence, the address streams and
  the buffer selection.
- **`tb_mmm3d_top`:** the whole design at the example sizes d0i = 4, d0j = 3,
  d0k = 3, B_gA = 2, B_gB = 1.
  - C is 2 × 2 blocks of 36 × 18 with n_k = 3: a 72 × 9 matrix times a
    9 × 36 matrix.
  - The external-memory model inserts random gaps in valid and ready.
  - Every C value and address is checked against a reference.
  - It counts each mechanism and fails if one never occurs: read stall, write
    stall, overlapped Read+Compute, drain, and completion.

The full default size (28 × 28 × 6) passes lint. It was not simulated end to
end, because building its simulation model takes too long. The largest
simulated configurations are the 4 × 3 × 3 top and the 3 × 4 × 4 array.

To run a testbench with Verilator 5:

    verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/mmm_pkg.sv tb/fp_ref_pkg.sv tb/tb_mmm3d_top.sv --top-module tb_mmm3d_top
    ./obj_dir/Vtb_mmm3d_top

Use the same command for the other testbenches, with their own file and top
name. To try another array shape, change the parameters at the top of
`tb/tb_mmm3d_top.sv`. The shared body in `tb/mmm_tb_body.svh` derives
everything else from them.
