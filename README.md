# A ternary-weight GEMM engine for wide, reduced-precision networks

Networks trained with 2-bit weights and 8-bit activations can match the
accuracy of full-precision models. This works if the layers are made wider
(more filters per layer), or if a full-precision teacher network guides the
training, or both. Each layer then does more multiply-accumulates, but each
one is far cheaper. The weights take only three values, -1, 0 and +1, so a
"multiplication" is just a choice: pass the activation, negate it, or drop
it.

This RTL is the hardware half of that idea: an 8 x 8 systolic array of
processing engines (PEs) that computes an 8 x 8 tile of C = A x B. A holds
8-bit unsigned activations. They are non-negative because they come after a
ReLU. B holds 2-bit ternary weights. C is accumulated in 32-bit signed
integers. There is no multiplier anywhere. A convolution becomes a series of
such tiles through the usual im2col unrolling.

## Arithmetic: the ternary product

The weight is stored as a 2-bit two's-complement number:

| code | value |
|------|-------|
| `00` | 0     |
| `01` | +1    |
| `11` | -1    |
| `10` | unused; the hardware treats it as -1 (sign bit set, not zero) |

`ternary_cmp` looks at the weight. If the weight is zero, the product is
zero. Otherwise it puts the weight's sign bit in front of the 8-bit
activation. The result is a 9-bit signed-magnitude term `{neg, mag}` (type
`gemm_pkg::term_t`). The PE's adder extends `mag` to 32 bits with zeros and
adds it to the accumulator, or subtracts it when `neg` is set. The 32-bit
accumulator wraps around in two's complement on overflow; it does not
saturate. The largest possible step is +/-255, so a reduction can be
8,421,504 steps long before it can overflow. A 3x3 convolution over 128
channels needs K = 1152.

The widths 2/8/9/32 come from the source design. The exact bit encoding, the
signed-magnitude reading of the 9-bit term and the wrap-around are choices
made here.

## Dataflow: output-stationary systolic array

```
             b_top[0]  b_top[1] ...  b_top[7]      (weights move down)
                |         |             |
 a_left[0] -> PE00  ->  PE01  -> ... -> PE07
                |         |             |
 a_left[1] -> PE10  ->  PE11  -> ... -> PE17        (activations move right)
   ...          .         .             .
 a_left[7] -> PE70  ->  PE71  -> ... -> PE77
```

Each PE (`pe.sv`) holds three registers:

- an activation register A, whose output goes to the PE on the right;
- a weight register B, whose output goes to the PE below;
- the accumulator C, which never moves.

Every clock edge, each PE loads A and B from its neighbours. On the same
edge, the accumulator adds the product of the values those registers held
in the previous cycle. So a value moves one PE per cycle, and its product
lands in C one cycle after it reaches a PE.

For A[i][k] and B[k][j] to meet in PE(i,j), row i must start i cycles late
and column j must start j cycles late. The gaps are filled with zeros.
`skew_delay` does this with a chain of i registers on lane i. A zero
operand adds nothing to the sum. This is what makes the scheme simple:

- the PEs need no valid bits;
- the zero padding does no harm;
- an idle cycle in the input stream is just one more zero step, so the
  input can pause at any time without any flow control inside the array.

Timing at 8 x 8: suppose step k enters at edge t. Its product is in
C[i][j] after edge t + i + j + 1. The last step therefore reaches the far
corner, PE(7,7), 15 edges after it was accepted.

## The tile engine (`gemm_accel`, top level)

Ports (ROWS = COLS = 8 by default):

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `start` | in | 1 | begin a tile; ignored while `busy` |
| `in_valid` | in | 1 | `a_col`/`b_row` carry one reduction step |
| `in_last` | in | 1 | with `in_valid`: this is the last step |
| `a_col[ROWS]` | in | 8 each | column k of A, so `a_col[i]` = A[i][k] |
| `b_row[COLS]` | in | 2 each | row k of B, so `b_row[j]` = B[k][j] |
| `busy` | out | 1 | a tile is running or draining |
| `done` | out | 1 | one-cycle pulse: `c` holds the finished tile |
| `c[ROWS][COLS]` | out | 32 each | accumulators, read in parallel |

How a tile runs:

1. In the cycle `start` is accepted, the skew registers and every PE are
   cleared.
2. From the next cycle on, each cycle with `in_valid` high is taken as one
   reduction step. Cycles with `in_valid` low feed zeros into the array.
3. After the step marked `in_last`, the engine drains for ROWS+COLS-1 = 15
   cycles.
4. `done` then pulses for one cycle, and `c` keeps the result until the next
   `start`.
5. A `start` in the `done` cycle begins the next tile with no gap. A tile of
   K steps therefore takes K + 16 cycles, back to back.

An assertion flags `in_valid` outside a running tile.

A convolution layer with C_in input channels, a 3x3 kernel and C_out filters
maps to GEMM tiles as follows:

- 8 output pixels × 8 filters per tile;
- K = 9·C_in steps per tile;
- step k = (channel, dy, dx) carries the 8 pixels' input values at that
  offset, and the 8 filters' weights there.

`tb/resnet_conv_tb.sv` does exactly this.

## What comes from the source design and what does not

Taken from the published design:

- the 8 x 8 array of 64 PEs;
- activations flowing right and weights flowing down, with C held in each
  PE;
- the PE's internal structure: A and B registers, a comparator, an adder
  and an accumulator;
- the widths: 8-bit unsigned A, 2-bit B, a 9-bit product term and a 32-bit
  signed accumulator;
- the "append the sign or output zero" product;
- the staggered, zero-padded operand streams.

Choices made here, where the source is silent:

- the weight encoding;
- the signed-magnitude form of the 9-bit term;
- reset, and the clear-on-start behaviour;
- wrap-around on overflow;
- the register chains that produce the skew;
- the start/last/done control and the drain counter;
- the parallel read-out of all 64 accumulators;
- taking operands as ports.

The source design does not describe operand memories, a host interface or
how results leave the array, so none of these exist here. Whatever drives
`a_col`/`b_row` must do its own im2col and tiling. It must also scale or
re-quantise the 32-bit outputs into the next layer's 8-bit activations;
this design has no hardware for that.

The source design is reported to be about 15x smaller and 12x more
power-efficient than a full-precision engine in the same process. That
claim cannot be checked from RTL and has not been.

## Which networks it can run

The engine runs any layer whose weights are ternary and whose activations
are 8-bit unsigned. For CIFAR-10 ResNet-44/56 these layers are 3x3
convolutions with 16, 32 and 64 filters on 32x32, 16x16 and 8x8 maps. In
the widened variants the filters are doubled, up to 128. The deepest
reduction is then K = 1152, and the largest possible sum is 1152·255 =
293,760, far inside 32 bits.

Networks with 4-bit or 32-bit weights, or 32-bit activations, do not fit
this datapath. Training does not fit it either, including the
full-precision teacher network used in distillation.

## Files

| file | contents |
|------|----------|
| `rtl/gemm_pkg.sv` | widths, `act_t`/`wgt_t`/`acc_t`/`term_t`, weight codes |
| `rtl/ternary_cmp.sv` | 2b x 8b product term (combinational) |
| `rtl/pe.sv` | processing engine |
| `rtl/systolic_array.sv` | ROWS x COLS grid of `pe` |
| `rtl/skew_delay.sv` | lane i delayed by i cycles |
| `rtl/gemm_accel.sv` | top: skew + array + control |
| `tb/*_tb.sv` | self-checking testbench per module |
| `tb/resnet_conv_tb.sv` | four complete ResNet conv layers through the top |

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
with a watchdog. The tests cover the following:

- `ternary_cmp_tb` covers all operand combinations.
- `pe_tb` checks the pipeline timing and clear. It also runs 8.4 million
  +255 steps to check that the accumulator wraps (about 5 s of
  simulation).
- `systolic_array_tb` checks random tiles against a reference product,
  including the exact latency to the far corner.
- `gemm_accel_tb` checks tiles with random idle cycles, starts while busy,
  back-to-back tiles, tiles at the extreme values, and the 15-cycle drain
  latency. It runs at the default 8 x 8 size.
- `resnet_conv_tb` runs four complete layers, 576 tiles in all, checking
  36,864 outputs against a direct convolution:
  - one layer from each stage of a CIFAR ResNet: 16 filters on 32x32, 32
    on 16x16 and 64 on 8x8;
  - a widened last stage, with 128 filters on an 8x8 map.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/gemm_pkg.sv tb/gemm_accel_tb.sv --top-module gemm_accel_tb -o sim
./obj_dir/sim
```

Substitute any other testbench name. The array size is set by the `ROWS`
and `COLS` parameters of `gemm_accel` and `systolic_array`. The testbenches
compute their expected results for any size.

Lint gives one warning: `SYNCASYNCNET` on `rst_n` in `gemm_accel`. The
reset is asynchronous in the flops, while the handshake assertion uses it
in `disable iff`. This is expected.
