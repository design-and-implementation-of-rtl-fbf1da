# Tiled int8 matrix-multiply accelerator for Transformer projections

This is synthesizable SystemVerilog for a dense matrix-multiply engine that
computes `C = A x B` on int8 operands with int32 results. It was sized for the
Q, K and V projections of a DistilBERT-class Transformer on a small edge FPGA
(a Zynq UltraScale+ device at 100 MHz). The activations `A` are at most 64 x 768
and the weights `B` are 768 x M. The engine relies on data reuse at two levels:

* **Block tiling.** All of `A` (at most 48 KiB) stays in on-chip memory. It is
  *persistent*: a later run can reuse it without fetching it again. `B` is too
  large to hold on chip (768 x 768 alone is 576 KiB). It is brought in 256
  columns at a time, one *column block*, and each block is used against all of
  `A` before the next block is loaded.
* **Register tiling.** Each 32 x 32 tile of the output is accumulated in a
  32 x 32 array of multiply-accumulate units. The array is fed from two 32 x 32
  register tiles, one of `A` and one of `B`, and advances one step along K
  every clock. That is 1024 int8 multiply-adds per clock.

The design follows a published HLS design of this accelerator. It keeps the
published loop nest, tile sizes, buffer sizes, operand formats, the
`update_A` reuse flag and the bus structure. Everything the publication
leaves open was decided here and is marked as such below: bus widths, the
register map, handshakes, and how the phases are sequenced.

## The loop nest

A run executes the following loop nest. `T = 32` is the tile size and
`BLOCK_M = 256` the column-block width:

```
if update_A: copy A (N x K) from memory into the A buffer
for j_block in 0, 256, ... < M:                  # column blocks of B and C
    cur_M = min(256, M - j_block)
    copy B[0..K-1][j_block .. j_block+cur_M-1] into the B buffer
    for i0 in 0, 32, ... < N:                    # tile rows
        for j0 in 0, 32, ... < cur_M:            # tile columns inside the block
            localC = 0
            for k0 in 0, 32, ... < K:
                load localA = A[i0..i0+31][k0..k0+31]  (from the A buffer)
                load localB = B[k0..k0+31][j0..j0+31]  (from the B buffer)
                for k in 0 .. min(32, K-k0)-1:   # one clock per k
                    localC[ii][jj] += localA[ii][k] * localB[k][jj]   (all ii, jj)
            write the valid part of localC to C[i0..][j_block+j0..]
```

In the RTL, the controller in `mmult_accel` is a single state machine that
walks this nest. Its phases do not overlap: a B block is fully loaded before
its first tile is computed, and the next tile starts only after the last
write response of the previous tile has arrived. Overlapping these phases by
double buffering would be the obvious next step. It is not part of this
design.

## The multiply-accumulate array (`mac_array`)

The array holds three sets of registers:

* `localA[ii][kk]`: 32 rows of A, each 32 elements along K.
* `localB[kk][jj]`: 32 rows of B, each 32 elements along the output columns.
* `local_c[ii][jj]`: one 32-bit accumulator per processing element, 1024 in all.

Each k0 step of a tile has two phases:

1. **Load (33 clocks).** On each of 32 clocks, the controller reads one word
   from each buffer: row `i0+r` of A at k0, and row `k0+r` of B at j0. Each
   word is 32 elements. The data comes back one clock later and is written
   into row `r` of `localA` and of `localB`. This one-clock read latency is
   why the phase takes 33 clocks rather than 32.
2. **Compute (`min(32, K-k0)` clocks).** Every processing element `(ii, jj)`
   multiplies `localA[ii][0]` by `localB[0][jj]` and adds the product to its
   accumulator. After each step, `localA` shifts one element along K and
   `localB` shifts one row, so the next k value is again at index 0. This
   shifting replaces a 32-way multiplexer in front of every multiplier.

Because compute runs exactly the number of valid k values, every output tile
takes exactly K array steps. This is the "one k per clock" (initiation
interval 1) rate. The end-to-end testbench checks it by counting steps.
`clear` zeroes the accumulators. If a clear and a step fall on the same
clock, the accumulators start from that step's products.

Products are signed 8 x 8 -> 16 bit and are sign-extended into 32-bit
accumulators, which wrap on overflow. With K <= 768 and int8 operands, the
largest possible sum is 768 x 16384, about 1.3 x 10^7, so it cannot overflow.

## Matrices whose sizes are not multiples of 32

N, K and M may have any value within the limits below. When a tile is
loaded, every element that lies outside the matrix is forced to zero. These
are A elements with row >= N or k >= K, and B elements with k >= K or
column >= cur_M. Zeroed elements add nothing to the sums. Buffer contents
left over from an earlier run, or never written, therefore do no harm. When
`C` is written, only the `min(32, N-i0)` valid rows and `min(32, cur_M-j0)`
valid columns of the tile are stored. There is no separate datapath for
edge tiles: they go through the same states and simply run fewer k steps
and fewer write beats.

Limits: `1 <= N <= 64`, `1 <= K <= 768`, `M >= 1` with no upper limit.
These are the parameters `NMAX` and `KMAX`. The hardware does not check
them. In simulation, an assertion reports N > NMAX. A run with a zero
dimension finishes at once and touches no memory.

## On-chip buffers (`tile_buffer`)

The same module is used twice:

| buffer | rows x elements | words x bits | contents |
|---|---|---|---|
| A (`u_a_buf`) | 64 x 768 | 1536 x 256 | all of A; kept across runs |
| B (`u_b_buf`) | 768 x 256 | 6144 x 256 | one column block of B |

Element `(row, col)` is stored in word `row*(COLS/32) + col/32`, at byte lane
`col%32`. A read returns 32 consecutive elements of one row, one clock after
`rd_en`. Writes go one element per clock, using byte-lane enables. The
contents are not reset. Together the two buffers hold 240 KiB of block RAM.

## Memory traffic and data layout

The matrices are stored row-major at byte addresses the host supplies:

* `A`: N x K int8.
* `B`: K x M int8.
* `C`: N x M int32, little-endian.

Each matrix has its own AXI4 master, as on the published block design:

* `m_axi_gmemA` and `m_axi_gmemB` are read-only (`axi_byte_reader`). A run
  fetches A as one range of `N*K` bytes. Each B block is fetched as K ranges
  of `cur_M` bytes, one per row of B.
* `m_axi_gmemC` is write-only (`axi_word_writer`). Each valid row of an
  output tile is one range of up to 32 words.

Both masters split a range into INCR bursts of at most 64 beats that never
cross a 4 KiB boundary, and keep one burst in flight. Unaligned start
addresses are allowed for A and B; C must be 4-byte aligned. The data bus
is 32 bits wide. Buffers are filled one element per clock, so a 32-bit beat
feeds the buffer for four clocks. AXI responses are accepted without being
checked.

## Control registers (`ctrl_regs`, AXI4-Lite `s_axi_control`)

| offset | name | access | meaning |
|---|---|---|---|
| 0x00 | control | R/W | bit 0 start (write 1; cleared when the run ends), bit 1 done (cleared by reading), bit 2 idle, bit 3 ready (cleared by reading) |
| 0x04 | GIE | R/W | bit 0 global interrupt enable |
| 0x08 | IER | R/W | bit 0 done, bit 1 ready |
| 0x0C | ISR | R/W | status bits; writing 1 toggles |
| 0x10 / 0x14 | A | R/W | A address, low / high word |
| 0x1C / 0x20 | B | R/W | B address |
| 0x28 / 0x2C | C | R/W | C address |
| 0x34, 0x3C, 0x44 | N, K, M | R/W | dimensions |
| 0x4C | update_A | R/W | bit 0: 1 = load A in this run, 0 = reuse the A already on chip |
| 0x54 | cycles | R | clocks from the latest start to its done |

`interrupt` is high while GIE is set and any ISR bit is set. The layout
follows the common HLS kernel convention so that an existing driver can use
it, but the publication does not specify it.

A typical host sequence:

1. Write the addresses, N, K, M and update_A.
2. Write 1 to 0x00.
3. Wait for the interrupt, or poll bit 1 of 0x00.
4. Optionally read 0x54.

To run the same A against several B matrices, for example the Q, K and V
weights, set update_A = 1 for the first call and 0 for the following ones.

## Timing

Clocks for one run, with memory that never stalls (derived from the state
machine and matching the simulations to within a few percent):

```
  N*K                                  A fill (only when update_A = 1)
+ sum over blocks  K * (cur_M + ~5)    B fill, one row range per B row
+ per tile         ceil(K/32) * 33     tile loads
                 + K                   array steps
+ per tile         rows * (cols + ~6)  C write bursts and responses
```

Results simulated at the default sizes:

| workload | multiply-adds | clocks | time at 100 MHz | multiply-adds per clock |
|---|---|---|---|---|
| (64x768) x (768x768), A loaded (Q projection) | 37.7 M | 776,167 | 7.8 ms | 48.6 |
| (64x768) x (768x768), A reused (K or V projection) | 37.7 M | 727,012 | 7.3 ms | 51.9 |
| (64x768) x (768x3072), A reused (feed-forward size) | 151 M | 2,908,045 | 29.1 ms | 51.9 |

About three quarters of the time goes to filling the B buffer one byte per
clock. The array is busy for only about 5% of a run. This is
consistent with the published observation that the design is bound by memory
traffic rather than by compute. For comparison, the publication reports
0.09 s and 3.12 GFLOP/s for the second case on the board, with real DDR and
interconnect latency. Its running text gives 9.67 ms for the same case,
which contradicts that table. Widening the fill path (several elements per
clock) is the first change to make for more speed. The buffer and bus
widths are parameters, but the fill logic would have to change.

## Files

| file | contents |
|---|---|
| `rtl/mmult_pkg.sv` | default sizes, register offsets, AXI constants |
| `rtl/mmult_accel.sv` | top level: loop-nest controller, boundary masks, all instances |
| `rtl/mac_array.sv` | 32x32 multiply-accumulate array and register tiles |
| `rtl/tile_buffer.sv` | A and B on-chip buffers |
| `rtl/axi_byte_reader.sv` | AXI4 read master for A and B |
| `rtl/axi_word_writer.sv` | AXI4 write master for C |
| `rtl/ctrl_regs.sv` | AXI4-Lite control slave |
| `tb/axi_mem_model.sv` | behavioural DDR model with an AXI4 slave port, random wait states and protocol checks |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus `tb_mmult_accel_full` |

Top-level parameters: `T` (tile size, 32), `BM` (column-block width, 256),
`NMAX` (64), `KMAX` (768), `ADDR_W` (64), `MAX_BURST` (64). `NMAX`, `KMAX` and
`BM` must be multiples of `T`, and `T` a power of two.

## Simulating

Every testbench prints one line, `TB_RESULT checks=<n> failures=<n>`, and
stops. A watchdog ends a testbench that hangs and counts it as a failure.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/mmult_pkg.sv rtl/*.sv \
    tb/axi_mem_model.sv tb/tb_mmult_accel.sv --top-module tb_mmult_accel
./obj_dir/Vtb_mmult_accel
```

The unit testbenches need only the package, their module and (for the bus
masters) `tb/axi_mem_model.sv`.

* `tb_mac_array` tests accumulation over several tile pairs, a partial K,
  clear, and -128 x -128. It also checks the one-step-per-clock rate.
* `tb_tile_buffer` tests both buffer shapes, including partial rewrites.
* `tb_axi_byte_reader` and `tb_axi_word_writer` use random ranges, unaligned
  starts and 4 KiB crossings, with back-pressure on both sides. Each also has
  a rate check with no stalls.
* `tb_ctrl_regs` tests every register, the handshake bits, interrupts and
  the timer.
* `tb_mmult_accel` covers:
  * partial tiles in every dimension;
  * two column blocks, the second one partial;
  * reuse of A with no A traffic;
  * completion by interrupt and by polling;
  * an empty product.

  It checks all of C, and it counts each of these events to confirm that
  each one actually occurred.
* `tb_mmult_accel_full` runs the DistilBERT-sized products above at the
  default parameters: the Q, K and V projections of one 64-token input
  (A loaded once, then reused twice), then the feed-forward-sized product.
  It checks all 344,064 outputs and finishes in well under a minute.

## What is not here

* **Host-side parts.** The surrounding system is not included: the
  processing system with its DDR controller, the AXI interconnects between
  the accelerator and the processor's ports, and the reset synchroniser.
  These are vendor blocks. The top level exposes the three AXI4 masters,
  the AXI4-Lite slave, the interrupt and an active-low reset that is
  already synchronous to `ap_clk`.
* **Software.** The software side is not included: buffer allocation, int8
  quantization of weights and activations, dequantization of the int32
  results, and bias addition.
* **Unchecked results.** Neither the published clock rate nor the FPGA
  resource figures were checked against this RTL. The original uses DSP
  slices for most multipliers and LUTs for the rest. Here that choice is
  left to synthesis.
