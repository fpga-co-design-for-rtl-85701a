# Zero-skipping systolic array for N:M-sparse, INT4-quantized weights

This design multiplies an activation matrix by a weight matrix that has been
compressed offline in two ways. First, N:M structured pruning keeps the N
largest-magnitude weights in every group of M consecutive weights along the
reduction dimension K, for example 2:4, 2:8 or 4:16. Second, the survivors
are quantized to 4-bit integers with one global scale. The host dequantizes
the weights back to FP16 before it hands them over. Pruned weights stay as
zeros in their original positions, so the hardware has no index or metadata
format to decode. Sparsity becomes visible to the hardware only as zero
weights. Each processing element (PE) of an output-stationary systolic array
checks its incoming weight, and for a zero it skips the multiply-accumulate.
A 2:4 matrix thus needs half of the multiply-accumulates (MACs) of a dense
one, and the same hardware serves any N:M ratio and any quantization
bit-width.

The RTL gives the accelerator kernel:

- the PE with its zero comparator;
- the PE grid;
- the on-chip Matrix A Buffer, Matrix B Weight Buffer and Output Buffer;
- the Data FIFOs and Weight FIFOs that feed the grid;
- a controller that runs one output tile.

The offline compression, the dequantization and the splitting of large
matrices into tiles are host software. The board's memory and its PCIe/DMA
shell are platform parts. None of these is in the RTL. The top-level ports
stand where they would connect.

## What is computed

One *run* computes an output tile

    C[r][c] (+)= sum over k < k_len of A[r][k] * W[k][c],   r < ROWS, c < COLS

- `A` is a `ROWS x k_len` tile of FP16 activations. Its rows are rows of the
  batch.
- `W` is a `k_len x COLS` tile of dequantized FP16 weights, whose columns are
  output features.
- `C` is returned in FP32.
- Defaults: `ROWS = COLS = 16`, `k_len <= KMAX = 512`.

A full layer `C(BxM) = A(BxK) W(KxM)` is computed by the host, one
`16 x 16` output tile at a time. When K is longer than 512, the host splits it
over several runs with `accumulate` set. Each such run adds onto the partial
sums that the previous run left in the PEs.

Each PE does, in order of `k`:

    if (a valid and w valid and w != 0)  acc = round_fp32(acc + a*w)

The product of two FP16 numbers is exact in FP32. Its 22-bit significand fits
in FP32's 24 bits, and its exponent lies between 2^-48 and 2^32. So the only
rounding is the round-to-nearest-even of each addition. The result is the
same as a sequential FP32 sum in `k` order, bit for bit. The testbenches
check exactly that. Skipping a zero weight changes nothing numerically,
since adding an exact zero leaves the sum unchanged. It only saves the work.

## Dataflow and timing

```
 host ports ──► Matrix A Buffer (KMAX x ROWS·16b) ──► Data FIFO r (one per row) ──► row r of the grid  ─►
            └─► Matrix B Weight Buffer (KMAX x COLS·16b) ─► Weight FIFO c (one per column) ─► column c ▼
                                              PE grid ROWS x COLS ── drain, one row per cycle ─► Output Buffer ─► host
```

Both tile buffers hold one K step per word. Word `k` of the A buffer is
column `k` of the A tile, with lane `r` in bits `[16r +: 16]`. Word `k` of the
weight buffer is row `k` of the W tile, with lane `c` in bits `[16c +: 16]`.
The controller (`gemm_controller`) runs a tile in four phases. Cycle 0 is the
cycle in which `start` is sampled.

| phase  | cycles                  | what happens |
|--------|-------------------------|--------------|
| STREAM | 1 .. k_len              | read word k−1 of both buffers; one cycle later the words are pushed into all FIFOs at once |
| skew   | (overlaps)              | FIFO lane i pops one cycle after the push, plus i cycles, so `A[r][k]` and `W[k][c]` meet in PE (r,c) |
| FLUSH  | ROWS + COLS + 1 cycles  | the last operands travel to PE (ROWS−1, COLS−1) and update its sum |
| DRAIN  | ROWS cycles             | row r of partial sums is written to Output Buffer word r |
| DONE   | 1 cycle                 | `done` pulse |

The latency from `start` to `done` is **k_len + 2·ROWS + COLS + 2 cycles**.
At the defaults this is 562 cycles for `k_len = 512`, whatever the sparsity.

An operand moves one PE per cycle, because each PE forwards its registered
copy of the operand. Operand `k`, popped in cycle `t` into row `r` or column
`c`, sits in the input registers of PE (r,c) in cycle `t + 1 + c` or
`t + 1 + r`. The partial sum then updates at the end of that cycle. The
skew is built by the FIFOs. All lanes are written in the same cycle, and lane
`i` is read `i` cycles later than lane 0. A FIFO therefore holds at most
`i + 1` entries, and its depth is `max(ROWS, COLS) + 1`.

While a run is busy, the A and B buffers must not be written. An assertion in
`nm_gemm_accel` catches such a write. Loading, computing and draining happen
one after another. There is no double buffering.

## Zero skipping

`pe` latches the incoming activation and weight. Each travels with a valid
bit that marks the real data within the skewed streams. In the next cycle a
comparator tests the registered weight against zero, accepting +0 and −0.

- For a nonzero weight, the FP16 multiplier (`fp_mul`) and the FP32 adder
  (`fp_add`) update the partial-sum register.
- For a zero weight, the register keeps its value.

Either way, the registered operands go on to the right and lower neighbours.
The saving is in arithmetic work, and so in switching power on an FPGA or
ASIC. It is not in cycles: the grid still takes one cycle per K step. For
2:4 weights at least half of the MACs are skipped. Survivors that quantize
to 0 are skipped as well.

`mac_count` and `skip_count` report the MACs performed and skipped in the last
run. They are cleared at the start of a run without `accumulate`. They exist
to make the saving measurable. The rest of the design does not depend on
them.

## Number formats and corner cases

- Activations and weights are IEEE binary16. Partial sums and outputs are
  binary32.
- FP16 subnormal inputs are handled exactly.
- The adder reads FP32 subnormals as zero and flushes results below 2^-126 to
  zero. In this datapath neither can occur, because all products and sums are
  multiples of 2^-48.
- Overflow gives infinity, and NaN or inf − inf gives the quiet NaN
  `7FC00000`. `x + (−x)` gives +0.
- A zero weight skips the MAC even when the activation is inf or NaN, so such
  an activation does not poison the sum.

## Ports of `nm_gemm_accel`

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; active-low synchronous reset |
| `start`, `k_len`, `accumulate` | in | start a run of `k_len` K steps (`0..KMAX`); keep the previous partial sums if `accumulate` |
| `busy`, `done` | out | run in progress; one-cycle completion pulse |
| `a_wr_en/addr/data` | in | write K step `addr` of the A tile (`ROWS` FP16 lanes) |
| `b_wr_en/addr/data` | in | write K step `addr` of the W tile (`COLS` FP16 lanes) |
| `out_rd_en/addr`, `out_rd_data` | in/out | read output row `addr` (`COLS` FP32 lanes), one-cycle latency |
| `mac_count`, `skip_count` | out | MACs performed / skipped in the last run |

Tile buffer contents are not reset. Only the lanes and K steps used by a run
need to be written.

## Sizes for the evaluated workloads

At the defaults a run holds a 16 x 512 activation tile (16 KiB) and a
512 x 16 weight tile (16 KiB). The matrices themselves stay in off-chip
memory.

- One 4096 x 4096 layer at batch 512 takes 32 x 256 output tiles x 8 K runs.
  That is 65,536 runs, or 36.8 M compute cycles, and 2:4 weights skip half of
  its 8.6·10^9 MACs.
- At batch 1, only one of the 16 array rows carries data.
- The linear layers of a 32-block LLaMA-7B, at batch 512, take about 14.2 G
  compute cycles.

Host loading time is not included in these counts. The array size, the buffer
depth and the clock are this design's choices, because none of them is given
for the original design. Absolute throughput therefore cannot be compared
with published GPU numbers.

## Where this RTL stands relative to the original description

These parts follow the original design:

- the output-stationary grid, with activations moving right and weights
  moving down;
- a PE made of input registers, a zero comparator, a bypassed multiplier and
  a partial-sum register;
- on-chip A, weight and output buffers feeding Data and Weight FIFOs;
- dequantized weights in a dense layout with zeros in place, and no
  sparsity metadata or integer arithmetic in hardware.

These parts are this design's own choices:

- the array size (16 x 16) and the buffer depth (512);
- FP32 accumulation, round-to-nearest-even, and flush-to-zero of FP32
  subnormals;
- the valid bits;
- the use of FIFO pop times to create the skew;
- the controller's phases, the drain path and the latency formula;
- the `accumulate` option for long K;
- the MAC counters;
- the simple buffer ports in place of the memory and shell interfaces.

Operating mode and mapping:

- No run-time mode switch for the N:M pattern or the bit-width exists. The
  dense, dequantized layout makes every pattern look the same to the
  hardware.
- The product is oriented as `C(BxM) = A(BxK) W(KxM)`: array rows are batch
  rows and array columns are output features.

## Files

Each file begins with a comment giving the module's function, interface and
timing.

- `rtl/nm_pkg.sv`: shared types (FP16/FP32, operand with valid bit, controller
  phases) and the zero test.
- `rtl/fp_mul.sv`, `rtl/fp_add.sv`: the MAC's exact FP16 multiplier and its
  FP32 adder.
- `rtl/pe.sv`, `rtl/pe_array.sv`: the zero-skipping PE and the grid.
- `rtl/operand_fifo.sv`, `rtl/tile_buffer.sv`: the FIFOs and the buffer memory.
- `rtl/gemm_controller.sv`, `rtl/nm_gemm_accel.sv`: the tile sequencer and the
  top level.
- `tb/fp_ref_pkg.sv`: the reference arithmetic. It widens to double, computes,
  and rounds back with round-to-nearest-even on the bit pattern. It also
  holds a software model of the offline weight preparation: magnitude N:M
  pruning, symmetric INT4 quantization with `s = 7 / max|w|`, and
  dequantization `w = q · s⁻¹` rounded to FP16.
- `tb/*_tb.sv`: one self-checking testbench per module.
  - `nm_gemm_accel_tb` runs the top at 4 x 3 with dense, 2:4, 1:4, 2:8,
    4:16 and all-zero weights, and with a K split over two runs.
  - `nm_gemm_accel_full_tb` runs a complete 16 x 16 x 512 tile at the
    default sizes.
  - `nm_gemm_layer_tb` computes a whole layer larger than one tile, tiled
    and K-split the way the host does it.

Every testbench prints `TB_RESULT checks=N failures=M` and stops on a watchdog
if the design hangs.

## Simulating

With Verilator 5 (two-state, with timing), from the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal rtl/nm_pkg.sv tb/fp_ref_pkg.sv \
    rtl/fp_mul.sv rtl/fp_add.sv rtl/pe.sv rtl/pe_array.sv rtl/operand_fifo.sv \
    rtl/tile_buffer.sv rtl/gemm_controller.sv rtl/nm_gemm_accel.sv \
    tb/nm_gemm_accel_full_tb.sv --top-module nm_gemm_accel_full_tb -Mdir obj
./obj/Vnm_gemm_accel_full_tb
```

For another testbench, replace the testbench file and the top module. The
block testbenches need only the files their module uses. All of them finish
in seconds.

To change the array size, set `ROWS`, `COLS` and `KMAX` on `nm_gemm_accel`.
The FIFO depth and the controller timing follow from them. Changing the PE
latency means changing `FLUSH` in `gemm_controller`.
