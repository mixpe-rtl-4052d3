# MixPE: a shift&add mixed-precision GEMM accelerator, in SystemVerilog

LLM inference with weight-only or weight-mostly quantization multiplies
low-precision weights (here UINT4) with higher-precision activations (INT8 or
FP16). This is a mixed-precision GEMM ("mpGEMM"). On GPUs the usual method first
dequantizes every weight, `w_hat = s * (Q - z)`, and then runs an ordinary
high-precision GEMM. That puts a subtraction and a multiplication per weight
inside the main loop, and all the arithmetic stays in high precision.

This design uses two ideas from the MixPE paper (Zhang et al., "MixPE:
Quantization and Hardware Co-design for Efficient LLM Inference"):

1. **Dequantize after the group dot product.** With group quantization, one
   scale `s` and one zero point `z` cover a group of `g` consecutive weights
   (g = 128). The dot product can therefore be regrouped:

       y = sum_groups  s_G * ( sum_{j in G} Q_j * x_j  -  z_G * sum_{j in G} x_j )

   The inner sums use the raw 4-bit codes `Q_j`. The scale and zero point are
   applied once per group instead of once per weight.

2. **Multiply by shifting and adding.** A UINT4 weight has only four bits, so
   `Q * x = sum_i Q[i] * (x << i)`. For INT8 activations the processing element
   (PE) is four gated shifters and a small adder tree. For FP16 activations,
   `x * 2^i` is an exponent increment, so the same structure works with
   floating-point adders.

The RTL builds both ideas into a complete accelerator: an output-stationary
4 x 4 systolic array of these PEs, the buffers around it, a group
activation-sum unit, a dequantization unit, and a sequencer that runs a whole
tiled GEMM from an on-chip global buffer. The PEs, the array and the dataflow
follow the paper. The memory organisation, the sequencer, the job interface and
the number formats around the array are this design's own, because the paper
does not specify them. Each departure is listed below.

## Number formats

| quantity | format | origin |
|---|---|---|
| weight code `Q` | UINT4 | paper |
| activation `x` | INT8 (W4A8 mode) or IEEE FP16 (W4A16 mode) | paper |
| group size `g` | 128 (the `GROUP` parameter) | paper |
| scale `s` | FP16, one per output channel and group | this design |
| zero point `z` | UINT4, one per output channel and group | this design |
| partial sums | 32-bit two's complement (A8) or FP32 (A16) | this design |
| output `y` | FP32 | this design (the paper says only "higher precision") |

The FP32 arithmetic used here (adders, multiplier, int-to-float) rounds to
nearest-even, flushes subnormal results to zero, and follows IEEE for Inf and
NaN, with a single canonical NaN.

The mode is fixed when the design is built: `PREC = PREC_A8` or `PREC_A16`
in `mixpe_pkg`. The paper evaluates MixPE-A8 and MixPE-A16 as two separate
designs, and this RTL does the same. There is no run-time mode switch.

## The processing elements

`mixpe_a8_pe` (W4A8) contains:

```
           act_in ──► [INT8 reg] ──────────────────────────► act_out (to right PE)
                          │ x
  w_in ─► [INT4 reg] ─┐   ├─ w[0] ? x<<0 : 0 ─┐
      │               │   ├─ w[1] ? x<<1 : 0 ─┴─(+)─┐
      ▼               │   ├─ w[2] ? x<<2 : 0 ─┐     (+)──(+)──► psum
  w_out (to PE below) │   └─ w[3] ? x<<3 : 0 ─┴─(+)─┘     ▲       │
                      └── weight bits gate the shifters    └───────┘
```

Each shifter output is 12 bits, the tree result is 14 bits, and the
accumulator is 32 bits. A group of 128 INT8 x UINT4 products needs at most
19 bits.

`mixpe_a16_pe` (W4A16) has the same topology. The shifters become
`fp16_pow2_scale`, which takes an FP16 value and `i` and returns `x * 2^i` as
FP32. It moves the exponent to the FP32 bias, adds `i`, and keeps sign and
mantissa. It normalises FP16 subnormals while widening. Working in FP32 means
the scaling is exact and cannot overflow. The tree is
`(t0 + t1) + (t2 + t3)` in FP32, followed by `psum + tree`. Each addition
rounds, and the testbenches model rounding in exactly this order.

**Control.** A `valid` flag and a `first` flag travel with the activation,
one register stage per PE. A valid element marked `first` loads
`psum <= product`, which starts a new group. Other valid elements accumulate,
and invalid cycles leave `psum` unchanged. Because of this, consecutive groups
need no clear cycle.

**Timing.** The operands are registered on one clock edge, and `psum` takes
the product on the next edge. The latency from a PE's input to its `psum` is
2 edges. Reset is synchronous and active low.

## The array and its skew

`mixpe_array` arranges `ROWS x COLS` PEs (4 x 4 by default, as in the paper's
evaluation):

- Row `r` receives output row `r`'s activations at its left edge.
- Column `c` receives the weights of output channel `c` at its top edge.
- Activations move right one PE per cycle, and weights move down.

PE `(r,c)` therefore accumulates `sum_k x[r][k] * Q[c][k]` in place. This is
an output-stationary dataflow.

The feeder must skew its inputs: element `k` of row `r` enters at cycle
`k + r`, and element `k` of column `c` at cycle `k + c`. Both operands of
product `k` then meet in PE `(r,c)`. Counting from the first element at the
array edge, PE `(ROWS-1, COLS-1)` holds the group's final sum
`GROUP + ROWS + COLS - 1` edges later. `tb_mixpe_array` checks that it is not
there one edge earlier.

The paper's array figure also draws adder symbols between groups of PEs, and
its text does not explain them. They are not modelled here. Partial sums leave
the array through one read port per PE, which the dequantizer indexes. They
are not shifted out along the columns.

## Dequantizing after the group product

Two units handle the second term of the equation and the scale. The paper
leaves these to "other specialized computation units".

- **`act_group_sum`** taps the activation stream where it enters the array.
  It keeps one accumulator per row, with the same `valid`/`first` flags as
  the array, so at the end of a group it holds `sum_j x_j` for each row. It
  sums in INT32 for A8 and in FP32 for A16.
- **`dequant_unit`** handles one output element per cycle and computes

      out = (first_group ? 0 : acc) + s * (psum - z * sumx)

  `z * sumx` is formed by shift&add over the four zero-point bits. In A16
  mode these are exponent increments plus an FP32 adder tree. In A8 the
  difference `psum - z*sumx` is an exact integer, converted once to FP32. The
  scale is applied by one FP32 multiplier. It runs once per output element
  per group, which is `1/128` of the MAC rate. Results appear on the edge
  after the input, tagged with their output-buffer index.

The running outputs live in `output_buffer`, one FP32 entry per PE. Each
entry is read, added to, and written back once per group.

## Memory and the job interface

`mixpe_accel` is the top level. Its external port is port A of
`global_buffer` (`ext_en/ext_we/ext_addr/ext_wdata/ext_rdata`, synchronous,
one cycle read latency). This is the path to off-chip memory, or to a host
that loads tensors and reads results. The global buffer defaults to 64 Ki
32-bit words (256 KiB). The paper gives no size.

A job computes `Y[m x n] = X[m x k] * W[n x k]^T`. It is described by
`cfg` (`gemm_cfg_t`: `m, n, k, x_base, w_base, q_base, o_base`) and launched
by a one-cycle `start` while `busy` is low. `done` pulses when the last tile
has been written back. `m`, `n` and `k` must be non-zero multiples of `ROWS`,
`COLS` and `GROUP`, and an assertion reports a violation. All addresses are
word addresses, and each tensor is stored row-major with `k` contiguous:

| tensor | address of element | packing per 32-bit word |
|---|---|---|
| X | `x_base + i*(k/E) + kk/E` | E = 4 INT8 or 2 FP16, element 0 in bits [7:0] / [15:0] |
| W | `w_base + j*(k/8) + kk/8` | 8 UINT4, element 0 in bits [3:0] |
| scale/zero | `q_base + j*(k/128) + group` | `{12'b0, zero[3:0], scale_fp16[15:0]}` |
| Y | `o_base + i*n + j` | one FP32 |

The sequencer works through the output tiles (`ROWS` rows of X by `COLS`
channels of W), going along `n` first. For every group of a tile it runs
these phases, one after another:

| phase | cycles (defaults: A8 / A16) | action |
|---|---|---|
| LOAD_X | `ROWS*GROUP/E` (128 / 256) | global buffer → activation buffer (`lane_buffer`, one bank per row) |
| LOAD_W | `COLS*GROUP/8` (64) | global buffer → weight buffer (`lane_buffer`, one bank per column) |
| LOAD_Q | `COLS` (4) | scales and zero points → registers |
| COMP | `GROUP+ROWS+COLS` (136) | skewed streaming through the array; lane `l` reads element `t-l` at cycle `t` |
| DEQ | `ROWS*COLS` (16) | one output element dequantized per cycle |

After the last group, STORE writes the `ROWS*COLS` outputs back in 16 cycles.
A job therefore takes exactly

    tiles * (groups * (ROWS*GROUP/E + COLS*GROUP/8 + COLS + GROUP+ROWS+COLS + ROWS*COLS) + ROWS*COLS)

cycles while `busy`. For example, an 8 x 8 x 4096 W4A8 job takes 44,608
cycles. The testbenches check this count. Phases are not overlapped, so the
array is busy about 37 % of the time (128 of 348 cycles per group in A8). The
paper describes no double buffering, and adding it is the obvious next step if
throughput matters. `stat_groups` and `stat_tiles` count the work done since
reset.

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| `PREC` | `PREC_A8` | top, array, sum, dequant | W4A8 or W4A16 |
| `ROWS`, `COLS` | 4, 4 | top, array | array shape (paper: 4 x 4) |
| `GROUP` | 128 | top | quantization group size (paper: 128) |
| `GB_DEPTH` | 65536 | top, global buffer | global-buffer words |
| `PSUM_W`, `WORD_W` | 32, 32 | `mixpe_pkg` | partial-sum and memory word width |

Other sizes follow from these. `lane_buffer` holds one group per lane, and
`output_buffer` holds `ROWS*COLS` entries. The counters limit a job to
`m, n, k < 65536`. The global buffer limits how much of a layer one job can
cover. For instance, a batch-8 W4A8 job with k = 4096 fits 100 output
channels, so a 4096-channel layer of OPT-6.7B is about 41 jobs. Off-chip
traffic between jobs is outside this design.

## Files

`rtl/`: `mixpe_pkg` (types, formats, job descriptor), `mixpe_accel` (top and
sequencer), `mixpe_array`, `mixpe_a8_pe`, `mixpe_a16_pe`, `fp16_pow2_scale`,
`act_group_sum`, `dequant_unit`, `lane_buffer`, `output_buffer`,
`global_buffer`, and the FP32 helpers `fp32_add`, `fp32_mul` and
`int_to_fp32`.

`tb/`: one self-checking testbench per unit. `tb_fp_pkg` holds the real-number
reference and FP32 rounding used by the testbenches. `tb_accel_driver` is a
reusable job generator and checker for the top. The top-level testbenches are:

- `tb_mixpe_accel`: both modes, group 32, several tiles, several groups, two
  jobs back to back.
- `tb_mixpe_accel_full`: default configuration, 8 x 8 x 512 plus a second
  job.
- `tb_workload_llm`: OPT-6.7B-shaped W4A8 slices with k = 4096 at batch 2
  (padded to 4 rows), 8 and 32, and a LLaMA-2-13B-shaped 8 x 8 x 5120 W4A16
  slice, all at default sizes.

Every testbench prints `TB_RESULT checks=N failures=M`. The FP references are
built from real arithmetic, rounded to FP32 at the same points where the
hardware rounds, so FP results are compared bit for bit.

To simulate with Verilator 5, run from the directory above `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mixpe_pkg.sv tb/tb_fp_pkg.sv tb/tb_mixpe_accel_full.sv --top-module tb_mixpe_accel_full
./obj_dir/Vtb_mixpe_accel_full
```

Substitute any other testbench name. Each one runs in well under a second.

## How closely this follows the paper

Taken from the paper:
- the shift&add W4A8 PE, with its register placement (INT8 to the right, INT4
  downward), four gated shifts, two-level adder tree and psum register;
- the exponent-increment W4A16 PE with the same topology;
- the output-stationary array of 4 x 4 PEs, with weights from the top and
  activations from the left;
- the global, weight, activation and output buffers around the array;
- UINT4 weights, INT8/FP16 activations and a group size of 128;
- the mpGEMM → dequantize → accumulate ordering per group.

This design's own choices, where the paper is silent:
- the FP32 partial sums, outputs and FP arithmetic for A16;
- the FP16 scale and UINT4 zero-point formats;
- building the activation-sum and dequantization in hardware;
- the valid/first flags;
- the buffer organisation and global-buffer layout;
- the sequencer, its non-overlapped schedule and the job interface;
- synchronous active-low reset.

Not reproduced:
- The paper's "2x speed-up" of a W4A8 MixPE over an INT8 multiplier PE is a
  throughput claim about the element's cost. This array performs one MAC per
  PE per cycle.
- The paper's FPGA area, power and energy results and its design-space sweep
  are evaluations, not hardware. They are not part of the RTL.
- The 250 MHz clock target was not checked.
