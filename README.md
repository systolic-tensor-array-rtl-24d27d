# STA-DBB: a systolic tensor array for density-bound-block sparse INT8 GEMM

CNN inference on phones is dominated by INT8 matrix multiplication (convolutions lowered to
GEMM). A classic systolic array spends much of its area and power on the operand and
accumulator registers that sit next to every multiplier. This design reduces that overhead in
two ways:

1. **Tensor PEs.** Each processing element of the systolic grid is not one MAC but a small
   matrix engine: an `A x C` grid of dot-product units, each of length `B`. Operands that enter a
   PE are reused `A` (weights) or `C` (activations) times before they are registered again, so
   far fewer pipeline flip-flops and accumulators are needed per MAC. A shape is written
   `AxBxC_MxN`: an `M x N` grid of `AxBxC` tensor PEs.
2. **Density-bound blocks (DBB).** Weights are pruned so that every block of 8 consecutive
   weights along the reduction dimension holds at most 4 non-zeros. Because the bound is known,
   each 8-long dot product needs only 4 multipliers. A 4:1 multiplexer per multiplier (8:1
   here) picks the activation that matches each non-zero weight. Dense models still run,
   at half rate.

The RTL implements the STA-DBB in its `4x8x4_2x2` configuration: 2 x 2 tensor PEs, each with
4 x 4 sparse dot-product units of length 8 with 4 multipliers. That is 512 effective INT8 MACs
per clock on 256 physical multipliers, with INT32 accumulators.

## Arithmetic and data layout

One run of the engine (a *tile*) computes `O = X * W`, with `X` of size `(A*M) x K` (8 x K
activations), `W` of size `K x (C*N)` (K x 8 weights), and `O` of size 8 x 8 in INT32. `K`
must be a multiple of 8. Larger GEMMs are cut into 8 x 8 output tiles by whoever drives the
engine. The dataflow is output-stationary: every output element lives in one accumulator for
the whole tile, and the operands move.

Every cycle one *beat* enters the array, and it carries 8 consecutive values of the reduction
dimension:

| port | content for beat `kb` |
|---|---|
| `act_i[m][a][b]` | `X[m*A+a][kb*8+b]` (signed INT8) |
| `wblk_i[n][c]` | block `kb` of column `n*C+c` of `W`, 64 bits |

A weight block in **sparse mode** is DBB-compressed: byte 0 is a bitmask (bit `i` set means
element `i` is non-zero), and bytes 1 to 4 hold the non-zero values in ascending element order.
That is 5 bytes instead of 8, a 37.5% saving in weight storage. Bytes 5 to 7 are ignored. In
**dense mode** the block is simply the 8 weights, byte `i` = element `i`.

If a sparse block has more than 4 bits set, it breaks the density bound. `dbb_overflow_o`
then rises in the cycle the block is issued, and only its first four non-zeros are used.

## Inside a tensor PE

```
              weights (C columns x 4 values + 3-bit indices) from above
                 |            |            |            |
 act row 0 --> [SDP 0,0]   [SDP 0,1]   [SDP 0,2]   [SDP 0,3] --> |reg| --> next PE
 (8 values)      |            |            |            |
 act row 1 --> [SDP 1,0]   ...                                  --> |reg|
   ...
 act row 3 --> [SDP 3,0]   ...                                  --> |reg|
                 |            |            |            |
               |reg|        |reg|        |reg|        |reg|    (weights to the PE below)
```

A sparse dot-product unit (`sdp`) holds the following:

* four 8:1 multiplexers. Multiplexer `j` uses the index of weight `j` to select the activation
  at that position of the block;
* four signed 8x8 multipliers;
* one adder that sums the four products with the current accumulator value;
* a 2:1 multiplexer that loads either that sum (accumulate) or the accumulator of the unit
  above (readout shift);
* the INT32 accumulator register.

Inside a PE there are no registers between the units. Every SDP in PE row `a` sees the same
8 activations, and every SDP in PE column `c` sees the same 4 weights. Registers exist only at
the PE boundary: one stage to the right for the activations and one stage below for the
weights. A beat therefore moves one PE per clock, and each PE has `A*B + C*NNZ` = 48 operand
registers (plus indices) for 64 effective MACs.

With `NNZ = B` the multiplexers disappear (`sdp` has a generate branch for this). The same RTL
then builds the dense systolic tensor array, whose units are plain dot-product units.

**Zero-operand gating.** Every operand lane carries a non-zero flag next to its data byte. A
lane's data register only loads when a valid, non-zero value arrives. This clock enable is
what a clock-gating cell is made from, so a zero operand causes no toggling downstream. A lane
whose flag is clear is read as zero. `gated_o` reports how many lanes were held in the current
cycle.

## Skew, timing and readout

PE `(m, n)` must see beat `kb` of its activations and of its weights in the same cycle. The top
module therefore delays the edge inputs: PE row `m` gets its beat `m` cycles late and PE column
`n` gets it `n` cycles late (`skew_buffer`). Beat `kb` then reaches PE `(m, n)` at `kb + m + n`.
An assertion in `tensor_pe` checks that activation and weight beats always meet.

A tile is sequenced by `sta_ctrl` through four states:

| state | duration | what happens |
|---|---|---|
| RUN | `K/8` cycles sparse, `2*K/8` dense, plus bubbles | beats accepted over `in_valid_i`/`in_ready_o` |
| DRAIN | `M+N-2` = 2 cycles | last beat travels to PE (1,1) |
| SHIFT | `A*M` = 8 cycles | `out_valid_o`, one output row per cycle, row 7 first |
| IDLE | - | `done_o` pulses once |

Without bubbles, a tile takes `1 + K/8 + 2 + 8` cycles from the `start_i` edge to `done_o`
in sparse mode. In dense mode it takes `1 + K/4 + 2 + 8` cycles.

**Readout.** The accumulators of each output column form one vertical shift chain of 8 units
across both PE rows. During SHIFT every accumulator loads the one above it, and zeros enter at
the top. The bottom of the chain, `out_o[n][c]`, shows `O[out_row_o][n*C+c]`. After 8 shifts all
results have left and every accumulator holds zero, so the next tile needs no separate clear.
Readout and computation do not overlap.

**Dense mode.** The 4 multipliers of an SDP cover half a dense block per cycle. Each dense beat
is therefore issued twice: first elements 0 to 3 (indices 0 to 3), then elements 4 to 7. The
activations are the same both times. `in_ready_o` is high only on the second issue, so the
source must hold the beat in between. A cycle with `in_valid_i` low is a bubble. It sends an
empty beat down the skewed pipeline and does no harm.

## Files

| file | contents |
|---|---|
| `rtl/sta_pkg.sv` | types (`op_t`, `acc_t`, `mode_e`) and default shape |
| `rtl/sdp.sv` | sparse dot-product unit with accumulator |
| `rtl/tensor_pe.sv` | A x C SDP grid, boundary registers, zero gating |
| `rtl/sta_array.sv` | M x N grid of tensor PEs, shift chains |
| `rtl/dbb_decoder.sv` | bitmask block to values and indices; dense phases |
| `rtl/skew_buffer.sv` | edge delay line (type-parameterised) |
| `rtl/sta_ctrl.sv` | tile sequencer |
| `rtl/sta_dbb_top.sv` | the engine |
| `tb/tb_<module>.sv` | self-checking testbench for each module |
| `tb/tb_workload_resnet50.sv` | one output tile of four ResNet-50 layers |
| `tb/tb_sta_dense_array.sv` | the grid built as the dense STA 4x8x4_2x2 (`NNZ = B = 8`) |

Every testbench prints `TB_RESULT checks=N failures=F` and stops itself through a watchdog.
To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_sta_dbb_top rtl/sta_pkg.sv tb/tb_sta_dbb_top.sv
./obj_dir/Vtb_sta_dbb_top
```

`tb_sta_dbb_top` runs the engine at its default size. It covers sparse and dense tiles with
mode switches, bubbles, back-pressure, zero gating, readout and an overflowing block, and it
checks every result and the tile latency. The test takes well under a second.
`tb_workload_resnet50` runs conv1 (dense, K=147), blk1/unit3/conv3 (K=64), blk3/unit1/conv2
(K=2304) and blk4/unit3/conv1 (K=2048). It uses 3-of-8 weights and the activation sparsity of
each layer. The data are random, but the shapes are the real ones.

## Changing the shape

All modules take `A, B, C, NNZ, M, N` as parameters; the defaults come from `sta_pkg`. The
constraints are:

* `B` is at most 8, because the bitmask is one byte;
* `NNZ` divides `B`, and `B/NNZ` is the dense-mode slowdown;
* the sparse block (`NNZ+1` bytes) fits in `B` bytes.

`KW` sets the width of `nbeats_i` (16 bits: K up to 524,280). The small
`2x4x2_2x2` array (SDP4 units, 2-of-4 blocks, 2-bit indices) is `A=2, B=4, C=2, NNZ=2, M=N=2`;
its readout takes `A*M` = 4 cycles. `tb/tb_sta_dbb_example.sv` runs the end-to-end test on it.

## Where this RTL departs from, or adds to, the source description

The following follow the published architecture:

* the tensor-PE structure and the SDP datapath (muxes, multipliers, adder, accumulate/shift mux);
* register-to-register operand movement between PEs only;
* bottom readout through shift chains;
* the DBB bitmask format;
* dense support at half throughput;
* the 4x8x4 tensor-PE shape with 4-of-8 sparsity.

The following are this design's own choices:

* **Grid size `M = N = 2`**, taken from the architecture drawings. The evaluated configuration
  names only the tensor-PE shape.
* **Signed INT8** for both operands; the INT32 accumulators wrap around.
* **Synchronous active-low reset.**
* **The whole control and interface:**
  * the valid/ready input handshake;
  * per-tile start and beat count;
  * row-by-row result stream;
  * a broadcast shift enable.
* **The internals of dense mode**, which are undescribed in the source: fixed half-block
  indices, and the activation beat held for two cycles.
* **Zero gating** built as flag + load enable rather than as gated clocks.
* **The `dbb_overflow_o` and `gated_o` monitors.**
* **No on-chip memories.** SRAMs or buffers that would feed the array are not specified, so
  the operands come in through ports at one beat per cycle.
* **Sparsity level.** Some of the evaluation uses 62.5% sparse weights (at most 3 non-zeros
  per block). These run on the 4-of-8 hardware with one multiplier slot idle.

Nothing here reproduces the area, power or 1 GHz timing results; those depend on a 16 nm
synthesis flow.
