# HBFP training accelerator in SystemVerilog

Training a neural network in narrow fixed-point arithmetic is cheap in silicon
but loses too much range. Training it in floating point keeps the range, but
every multiplier then needs exponent logic. **Hybrid block floating point
(HBFP)** splits the work between the two:

* **Dot products** (matrix multiplications, convolutions, outer products) run in
  *block floating point* (BFP). A vector of values shares one exponent `e`, and
  each element keeps only a signed integer mantissa `m_i`, worth `m_i · 2^e`. A
  dot product of two BFP vectors is therefore an integer dot product plus one
  exponent addition. The multiply-accumulate array is a plain fixed-point
  array.
* **Everything else** (activation functions, the loss, the accumulation of
  partial results, the weight update) runs in ordinary floating point (FP).
  These steps are few next to the multiply-accumulates, and they need range.

Each dot product picks its exponent just before it runs: the largest exponent
of the tensor going in. This keeps the integer mantissas well used.

This repository holds the RTL of an accelerator built this way, in the
configuration called *hbfp8_16*:

* 8-bit mantissas in the dot products.
* Weights stored with 16-bit mantissas. Only the top 8 bits feed the
  multipliers; the full 16 bits are used by the weight update.
* One exponent per 24 × 24 weight tile.

## Number formats

| Name | Where it is used | Layout |
|---|---|---|
| FP (`fp_t`, 16 bit) | activations, gradients, learning rate | sign, 8-bit exponent (bias 127), 7 stored fraction bits plus a hidden one (bfloat16-like) |
| wide FP (24 bit) | inside the weight update only | sign, 8-bit exponent, 15 fraction bits |
| BFP operand | input of the MatMul array | 24 × 8-bit two's-complement mantissas plus one 10-bit signed exponent |
| stored weight | weight buffer | 24 × 16-bit two's-complement mantissas plus the tile's 10-bit exponent, per buffer word |
| accumulator | MatMul output | 24 × 21-bit exact sums (2·8 + log2 24, rounded up) plus an 11-bit exponent |

There are no FP subnormals, infinities or NaNs:

* An exponent field of 0 means zero.
* Results that are too small flush to zero.
* Results that are too large saturate to the largest finite value.

**FP → BFP** (`fp_to_bfp`) works as follows:

* It finds the largest exponent `emax` of the 24 inputs.
* It shifts every significand right by `emax − E_i + FW + 2 − MW`.
* The shared exponent is then `emax − 127 + 2 − MW`. This puts the largest
  element into the top magnitude bits of an 8-bit signed mantissa.
* A mantissa that rounds up to +128 saturates to +127.

**BFP → FP** (`bfp_to_fp`) works as follows:

* It finds the leading one of each accumulator.
* It normalises the value and rounds it to 7 fraction bits.
* It computes the FP exponent from the bit position and the shared exponent.

Both converters use **stochastic rounding**:

* A uniformly random number, below the weight of the last kept bit, is added
  before the low bits are dropped. On average this is unbiased, which matters
  when many small updates are summed.
* The random numbers come from one 32-bit Xorshift generator per lane
  (`xorshift_rng`, shifts 13/17/5, three shifts and three XORs).
* The wide converters in the weight-update path round exactly instead. Their
  parameter `STOCH = 0` selects this.

## Datapath

```
 host ports ──► activation buffer (FP) ──A──► FP→BFP ──► BFP MatMul 24×24 ──► BFP→FP ──► activation/loss (FP) ─┐
     │                ▲        └──────B─────────────────────────────────────────────────────────┘ (2nd operand) │
     │                └────────────────────────────────────────────────────────────────────────────────────────┘
     └──────────► weight buffer (16-bit BFP) ──top 8 bits──► MatMul tile load
                        ▲      └──16 bits──► BFP→FP (wide) ──► w − lr·g ──► FP→BFP (wide) ──┘
```

* **Activation buffer** (`activation_buffer`):
  * 16384 words of 24 FP values.
  * One write port and two synchronous read ports. Port A feeds the converter.
    Port B feeds the activation unit's second operand (a residual or target
    row, or the forward activation for the ReLU derivative).
* **Weight buffer** (`weight_buffer`):
  * 16384 words. Each word holds one tile row of 24 mantissas of 16 bits,
    plus the tile exponent. That is 682 tiles.
  * The narrow read port returns the 8 most significant bits of each mantissa,
    with the exponent raised by 8. This is how forward and backward passes
    touch only the high half of the stored weights.
* **MatMul** (`bfp_matmul`):
  * It holds one stationary 24 × 24 tile of 8-bit mantissas, loaded a row per
    cycle, optionally transposed so that `W^T` is available for the backward
    pass.
  * It then takes one 24-element activation vector per cycle. The 24
    dot-product units produce 24 exact 21-bit sums, so 576 multiply-accumulates
    per cycle.
  * The result exponent is the sum of the two operand exponents. Nothing
    overflows or saturates inside the array.
* **Activation/loss unit** (`activation_unit`):
  * It applies one FP operation per vector, for 24 lanes: pass, add (sums
    partial tile products in FP), add-then-ReLU, ReLU derivative, and subtract
    (the squared-loss gradient `y − t`).
  * On a separate port it computes the SGD update `w − lr·g` in wide FP. Both
    use round-to-nearest-even adders and multipliers (`fp_add`, `fp_mul`).

## Commands and timing

The host fills the buffers through the `host_ab_*` and `host_wb_*` ports while
`busy` is low. Accesses while busy are flagged by an assertion. It then issues
commands (`hbfp_cmd_t`) on a valid/ready handshake. `hbfp_ctrl` sequences each
command as a stream of row steps, one per cycle, and tracks each row through
the fixed-latency pipeline with a shift register, so every later strobe fires
in the cycle its data arrives.

| Command | Effect | Cycles from accept to `done`, inclusive |
|---|---|---|
| `CMD_LOAD_W` | rows `w_row..+23` of the weight buffer, narrow form, into the array, optionally transposed | TILE + 3 = 27 |
| `CMD_MATMUL` | for `r < rows`: `dst+r ← act_op(MatMul(src+r), aux+r)` | rows + 7 |
| `CMD_LOAD_A` | activation rows `src..+23` into the array as a BFP tile (for the outer product `X^T·G`) | 2·TILE + 7 = 55 |
| `CMD_WUPDATE` | weight tile `w_row` ← `w − lr·g`, with `g` taken from activation rows `src..+23` | 2·TILE + 11 = 59 |

A MATMUL streams one row per cycle after a fixed pipeline of 6 stages:

1. buffer read
2. FP→BFP
3. MatMul
4. BFP→FP and operand read
5. activation unit
6. write back

A forward layer is built as follows:

* For each 24-wide output column block, load each input tile in turn.
* Stream the batch once per tile. The first pass uses `ACT_PASS`, the later
  ones `ACT_ADD` with `aux = dst`. The last can use `ACT_ADD_RELU`.
* The partial products are thus accumulated in FP, not in the array.

Backward passes are the same with a transposed tile load.

### Two-pass tile exponents

A tile shares one exponent, but its rows arrive one at a time. Two commands
must therefore convert a whole tile to BFP:

* **`CMD_LOAD_A`**, which makes an FP gradient tile the stationary operand.
* **`CMD_WUPDATE`**, which turns updated FP weights back into a 16-bit BFP
  tile.

Both run the tile twice:

1. The first pass only records the largest FP exponent over all 24 rows.
2. The second pass converts every row with that exponent forced
   (`use_emax_in` on `fp_to_bfp`), and then loads or writes the rows.

The weight update recomputes `w − lr·g` in the second pass rather than storing
it. This is safe because the wide path rounds deterministically.

An activation vector streamed through MATMUL gets its own exponent per
24-value row slice.

## Verifying and simulating

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog:

| Testbench | What it checks |
|---|---|
| `tb_xorshift_rng` | the sequence against a reference model, holding while disabled, reseeding on reset |
| `tb_fp_to_bfp`, `tb_bfp_to_fp` | every result is the exact value rounded down or up (with saturation and flush-to-zero), one cycle after its input; the average of many roundings is unbiased |
| `tb_bfp_matmul` | integer dot products against an integer model, plain and transposed tiles, one-cycle latency at full rate |
| `tb_activation_unit` | bit-exact against a real-number model with round-to-nearest-even |
| `tb_activation_buffer`, `tb_weight_buffer` | against array models |
| `tb_hbfp_ctrl` | the strobe schedule of every command, cycle by cycle |
| `tb_hbfp_accel` | see below |

`tb_hbfp_accel` runs the top at its default size. It covers a forward pass
with tile accumulation and ReLU, the loss gradient, the ReLU derivative, a
transposed backward product, the weight-gradient outer product and a weight
update. It compares every result with a double-precision model within
BFP-derived error bounds. It also checks the one-row-per-cycle streaming rate,
the command latencies, and that commands are refused while one runs.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/hbfp_pkg.sv tb/tb_hbfp_accel.sv --top-module tb_hbfp_accel
./obj_dir/Vtb_hbfp_accel
```

The full-size top builds in about half a minute and runs in about a second.

To change the format, edit the sizes in `hbfp_pkg`. The converters and the
array are parameterised. The FP → BFP mapping assumes `MW ≤ FW + 2`, so wider
dot-product mantissas need a wider FP fraction as well.

## Where this design departs from, or goes beyond, the published description

The published description gives the block diagram and the formats, but not
the insides. These parts are this design's own choices:

* the command set and the sequencer
* buffer sizes and port arrangement
* the bfloat16-like FP layout and its corner cases
* the wide-FP width
* the Xorshift shift constants
* the narrowing of stored weights by truncation
* the two-pass tile exponent scheme

The differences and limitations are these:

* **External I/O interface.** It is not specified, so it is not built. The
  buffers instead have plain host ports that work while the accelerator is
  idle.
* **Convolution.** There is no on-chip window addressing. A convolution must be
  laid out as matrix rows (im2col) in the activation buffer. Likewise the
  outer product needs `X^T` placed in the buffer by the host.
* **Data movement.** There is no on-chip copy or DMA command. Data is moved
  between the buffers and the outside through the host ports, and a MATMUL
  writes its results to any rows of the activation buffer.
* **Throughput.** One 24 × 24 array gives 576 MACs per cycle, which is
  230 GOp/s at 200 MHz. The published FPGA prototype reaches 1 TOp/s, about
  2500 MACs per cycle, with an array organisation that is not described.
* **Activation and loss functions.** Only ReLU, a squared-loss gradient and
  plain SGD are provided. Batch normalisation, softmax/cross-entropy,
  regularisation and momentum are not.
* **Capacity.** Weights and activations live only on chip. 682 weight tiles
  (about 393 k weights) hold one layer or a small network, but not networks of
  the ResNet-50 or WideResNet size. Those would need the weights swapped
  through the host ports.
