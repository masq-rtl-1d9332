# MASQ: a stage-wise multi-precision accelerator for masked diffusion

In masked diffusion (inpainting, stroke-based editing) only the region under a user's mask
has to be generated. The denoising network still runs over the whole image at every
timestep, but most of that image changes very little. MASQ exploits this with a per-token
choice of arithmetic precision:

- tokens inside the mask, and tokens close enough to it to influence it through the
  network's 3x3 convolutions, are computed in 8-bit block floating point;
- tokens further away are computed in 4 bits, and the rest in 2 bits;
- tokens that attend strongly to the masked region are promoted one level;
- late in the denoising schedule, some levels are lowered again.

The hardware makes this precision choice cheap. Its multiplier array is *bit-serial in 2-bit
slices*, so a block costs 4, 2 or 1 cycles depending only on its format. A *mask manager*
keeps a 2-bit "stage" code for every token. The controller reads the stage code and uses it
to choose the format at run time.

This repository holds synthesizable SystemVerilog for the whole accelerator datapath and
control, testbenches for every block and for the complete chip, and notes on the places where
this implementation had to choose for itself.

## 1. Stages and precision

Every token carries one of four stages, encoded in two bits:

| code | stage | meaning |
|------|-------|---------|
| `11` | 3 | inside the user's mask |
| `10` | 2 | within `d2` dilation steps of the mask (the receptive field of the convolutions at this resolution) |
| `01` | 1 | within `d1` steps (normally `2*d2`, the receptive field seen from the next lower resolution), or promoted by semantic refinement |
| `00` | 0 | everything else |

The precision of a stage depends on how far denoising has progressed. Two *downgrade
timesteps*, `dg1` and `dg2`, split the schedule into three phases. They default to 9 and 18
of a 50-step schedule.

| phase | timesteps | stage 3 | stage 2 | stage 1 | stage 0 |
|-------|-----------|---------|---------|---------|---------|
| 0 | `t < dg1` | MXINT8 | MXINT8 | MXINT4 | MXINT2 |
| 1 | `dg1 <= t < dg2` | MXINT8 | MXINT4 | MXINT4 | MXINT2 |
| 2 | `t >= dg2` | MXINT8 | MXINT4 | MXINT2 | MXINT2 |

The function `stage_prec` in `masq_pkg` holds this table. Two units apply it:

- the MP-MPU controller, to decide how many slices to run;
- the quantizer sequencer, to decide how to encode the activations that the MP-MPU will read.

Both must make the same choice. An assertion in `masq_top` checks that they agree for every
block.

## 2. Block formats

Activations and weights are stored in MX-style blocks of 32 elements. The elements share one
8-bit exponent `e`, and element `i` represents `x_i * 2^(e-127)`, where `x_i` is a
two's-complement integer of 8, 4 or 2 bits.

In memory a block is the packed struct `mx_block_t`, 266 bits wide:

- a 2-bit type: `00` = MXINT2, `01` = MXINT4, `10` = MXINT8;
- the exponent;
- 32 bytes, with element `i` sign-extended in byte `i`.

Weights are always MXINT8. A weight block is 32 weight bytes followed by its exponent.

The **quantizer** (`masq_quantizer`) turns 32 BF16 values into one block in a single cycle:

- `emax` is the largest BF16 exponent in the block.
- The shared exponent is `e = max(emax - (bits - 2), 0)`. This leaves the largest magnitude
  just inside the signed range.
- Each element is shifted into place and rounded half away from zero.
- The result is clamped to the signed range, for example -128..127 for 8 bits.

## 3. The bit-serial block PE (BMPE)

A BMPE computes the dot product of one activation block and one weight block. It processes
2 bits of each of the 32 activations per cycle, starting with the most significant slice:

```
cycle:        1        2        3        4         (MXINT8; MXINT4 stops after 2, MXINT2 after 1)
cfg:          11       10       01       00
slice bits:   [7:6]    [5:4]    [3:2]    [1:0]     (MXINT4 uses [3:2],[1:0]; MXINT2 uses [1:0])
```

For each slice:

- **SAM (`masq_sam`).** Each of the 32 sign-aware multipliers multiplies the 2-bit slice by
  an 8-bit signed weight. The first slice of every format (`cfg = 11`) contains the
  element's sign bit, so for that slice only the two bits are read as signed (-2..1).
  Lower slices are unsigned (0..3). Inside, the SAM takes absolute values, multiplies, and
  negates when the two signs differ.
- **Adder tree (`masq_adder_tree`).** Sums the 32 products into a 15-bit partial sum.
- **Shift-accumulate.** `acc = (acc << 2) + psum`. After the last slice, `acc` is the exact
  integer dot product.

Once a block is complete:

1. `masq_fxd2bf16` turns the integer into BF16 and folds in both exponents:
   `value = acc * 2^(ea-127) * 2^(ew-127)`. It rounds to nearest even, flushes to zero on
   underflow and gives infinity on overflow.
2. The value is added into an FP32 accumulator (`masq_fp32_add`) across the K blocks of one
   dot product. `first_k` clears the accumulator and `last_k` ends the dot product.
3. The FP32 sum is rounded to BF16 for output.

The result appears two cycles after the last slice of the last K block. The BMPE never
stalls. A block costs exactly 4, 2 or 1 cycles, and blocks follow each other back to back.

## 4. The MP-MPU and the array

An **MP-MPU** (`masq_mpmpu`) is 32 BMPEs plus a controller (`masq_mpu_ctrl`):

- The controller takes the offered block's stage and the current timestep, picks the format,
  and steps `cfg` down from `11`.
- It raises `blk_ready` in the block's last slice cycle.
- Every BMPE receives the same 2-bit activation slice and its own 32 weights. All 32 therefore
  run in lockstep at one precision, whatever the shape of the mask.
- A slicer selects bits `[2i+1:2i]` of every element, where `i = cfg - (4 - slices)`.

The top level instantiates **32 MP-MPUs**, giving 1024 BMPEs.

The way the 32 MP-MPUs share work is this design's choice:

- All of them receive the same activation block: one token and 32 input channels.
- MP-MPU `m` holds the weights of output channels `32m .. 32m+31`.
- One pass therefore produces 1024 output channels of one token.

At 800 MHz this array peaks at 13.1 TOPS in MXINT8, and at four and two times that rate for
MXINT4 and MXINT2 tokens.

`masq_gemm_seq` streams a matrix product through the array: tokens `t = 0..ntok-1`, and within
each token K blocks `k = 0..nkb-1`. For each block it reads three things:

- activation entry `act_base + t*nkb + k`;
- weight entry `wgt_base + k`, which holds the weights of all MP-MPUs for that K block;
- the mask row that holds token `t`, for its stage.

It issues the reads for the next block in the cycle the current block is accepted, so there
are no bubbles. A GEMM over tokens of mixed stages therefore takes `nkb * sum(slices(t))`
cycles plus a few cycles of pipeline.

## 5. Mask manager

`masq_mask_manager` runs one of three units over the mask buffer. Each buffer entry is one
row of `T = 64` tokens: a binary mask in the low 64 bits, or a stage mask as 64 2-bit codes.

- **Dilator (`masq_mask_dilator`).** Builds the stage mask of a tile of up to 64x64 tokens
  from the binary main mask.
  - It loads the tile one row per cycle.
  - It then performs one dilation step per cycle over the whole tile: a horizontal shift-OR
    followed by a vertical shift-OR, which together grow the region by one token in all
    eight directions.
  - A token first reached in step `s` becomes stage 2 if `s < d2`, otherwise stage 1, up to
    `max(d1, d2)` steps. Tokens never reached stay stage 0. The original mask is stage 3.
  - The result is written back one row per cycle, so a tile takes `2*size + max(d1, d2)`
    cycles plus control.
- **Updater (`masq_mask_updater`).** Applies the semantic refinement mask, one binary row per
  cycle. Its rule is `code | {0, r & ~code[1]}`: a flagged stage-0 token becomes stage 1 and
  every other code is unchanged. It counts the promotions.
- **Downsampler (`masq_mask_downsampler`).** Halves a binary mask for the next U-Net
  resolution. A 2x2 window with stride 2 outputs 1 when at least two of its four inputs are
  1. Two input rows give one output row of half width.

The dilation distances `d2` and `d1`, the timesteps at which to refine, and the refinement
mask itself all come from the host. The paper derives the refinement mask by averaging
attention probabilities towards the masked tokens in the last self-attention layer and
comparing the average with a threshold. That computation is not built in this RTL; the
host supplies the binary result through the DMA.

## 6. Vector unit

`masq_vpu` has 32 lanes of FP32 arithmetic. It takes BF16 operands, a per-lane stage, and
returns BF16 results one cycle after issue.

| op | code | result |
|----|------|--------|
| ADD, MUL, FMA | 0, 1, 2 | `a+b`, `a*b`, `a*b+c` |
| SILU | 3 | `a * sigmoid(a)` |
| GELU | 4 | `a * sigmoid(1.702 a)` |
| CLR | 5 | clears the per-lane statistics |
| GN_ACC | 6 | adds `a` and `a^2` to the per-lane sums, **only in lanes whose token is stage 2 or 3** |
| GN_NORM | 7 | `(a - mean) * rstd * b + c`, applied to every token |
| SM_MAX | 8 | per-lane running maximum over lanes whose key is **not stage 0** |
| SM_EXP | 9 | `exp(a - max)`, summed per lane; stage-0 lanes output 0 and add nothing |
| SM_NORM | 10 | `a * (1/sum)`; stage-0 lanes output 0 |
| REDUCE | 11 | folds the lanes (busy for 33 cycles) into `mean`, `rstd`, `max` and `1/sum` |

These are the two precision-aware rules of MASQ:

- Group-norm statistics come only from the high-precision tokens, and are then applied to all
  tokens.
- Low-precision keys get zero attention probability.

How the arithmetic is done is this design's own choice:

- `exp` is computed as `2^(x*log2 e)`: the integer part is a shift, and the fraction uses a
  cubic polynomial (relative error below 7e-4).
- Reciprocal and inverse square root use a bit-trick seed and three Newton steps.
- GELU uses the sigmoid approximation.

All of these are in `masq_fp_pkg`. `masq_vpu_seq` runs one op over a series of 32-lane
vectors, reading operands from the vector buffer or an output bank. It takes each lane's stage
from one of two places:

- the stage of the vector's token (per-token ops, where lanes are channels);
- the stage of token `tok_base + 32*i + lane` (per-key softmax ops, where lanes are keys).

## 7. Memories and DMA

All buffers are instances of `masq_buffer`, which has two ports:

- a 256-bit word port for the DMA;
- an entry-wide port for the datapath.

Both read with one cycle of latency. The default split of the 2 MiB is:

| buffer | entry | entries | size | layout |
|--------|-------|---------|------|--------|
| activation | one `mx_block_t` (2 words) | 8192 | 512 KiB | token-major: entry `base + t*nkb + k` |
| weight | 32x32 weight blocks (1056 words) | 31 | 1023 KiB | MP-MPU `m`, BMPE `n` at bit `(32m+n)*264`: 32 bytes, then the exponent |
| output | 32 BF16 (2 words), 32 banks | 128 per bank | 256 KiB | bank `m` = output channels of MP-MPU `m`, entry = token |
| vector | 32 BF16 (2 words) | 2048 | 128 KiB | free |
| mask | one row of 64 tokens (1 word) | 4096 | 128 KiB | free |

The DMA (`masq_dma`) moves `nwords` 256-bit words between external memory and one buffer,
walking entries word by word. Its external port has:

- a valid/ready request (address, write flag, write data);
- in-order read responses with no back-pressure.

Loads keep requests in flight and stream one word per cycle when the memory allows. Stores
take at least two cycles per word.

The DRAM itself (LPDDR5 or HBM2E in the evaluated systems) is outside the chip. The
testbenches use `tb/masq_ext_mem.sv`, a behavioural memory with a fixed latency and random
request stalls.

## 8. Commands

The host drives `masq_top` with `masq_cmd_t` commands over `cmd_valid`/`cmd_ready`. Commands
run one at a time, and `cmd_done` pulses when each finishes.

The command fields are:

| field | width |
|-------|-------|
| `opcode` | 4 |
| `sub` | 4 |
| `bufsel` | 3 |
| `bank` | 5 |
| `a0` .. `a3` | 16 each |
| `n0`, `n1` | 16 each |
| `ext` | 32 |

| opcode | fields used |
|--------|-------------|
| NOP (0) | none |
| DMA (1) | `sub[0]` 1 = store; `bufsel` buffer (0 act, 1 wgt, 2 out, 3 vec, 4 mask); `bank` output bank; `a0` first entry; `n0` words; `ext` external word address |
| SETT (2) | `ext[7:0]` timestep, `ext[15:8]` dg1, `ext[23:16]` dg2, `a0[2:0]` log2 of tokens per mask row |
| MASK (3) | `sub` 0 dilate / 1 update / 2 downsample; `a0` source rows; `a1` destination; `a2` refinement rows; `n0` tile size; `n1[5:0]` d2; `n1[11:6]` d1 |
| GEMM (4) | `a0` activation base; `a1` output entry base; `a2` stage-mask base; `a3` weight base; `n0` tokens; `n1` K blocks |
| QUANT (5) | `bufsel[0]` source is the vector buffer (else the output banks, bank = K block); `a0` source base; `a1` activation base; `a2` stage-mask base; `n0` tokens; `n1` K blocks |
| VPU (6) | `sub` op; `bufsel[0]` a from the vector buffer; `bufsel[1]` result to output bank; `bufsel[2]` per-key stages; `bank`; `a0` a base; `a1` result base; `a2` stage-mask base; `a3` b entry; `ext[15:0]` c entry; `ext[16]` b advances per vector; `n0` vectors; `n1` first token |

A layer at one timestep looks like this:

1. DMA the weights in.
2. QUANT the previous layer's BF16 results into MX blocks at each token's precision.
3. GEMM.
4. VPU passes: for example CLR, GN_ACC, REDUCE, then GN_NORM and SILU.

Masks are built once per resolution with MASK dilate, refreshed with MASK update whenever the
host has a new refinement mask, and carried to lower resolutions with MASK downsample. At a
downgrade point, a SETT command changes the phase.

The top also exposes activity counters: blocks processed per format, MP-MPU busy cycles,
formats produced by the quantizer, promotions, commands completed, and the VPU statistics.

## 9. Where this design departs from, or goes beyond, the source description

Taken from the published description:

- the stage encoding, and the stage/timestep precision table with downgrades at 9 and 18;
- the 2-bit slice order, the 4/2/1-cycle costs and the SAM's sign handling;
- the BMPE pipeline order: adder tree, shift-accumulate, fixed-point-to-BF16 with both
  scales, FP32 accumulation, BF16 output;
- 32 BMPEs per MP-MPU with a broadcast activation, and 32 MP-MPUs;
- 64x64 mask tiles;
- the rules of the dilation, update and 2x2-majority downsampling;
- group-norm statistics from stages 2-3 only, and stage-0 keys excluded from softmax;
- 2 MiB of on-chip memory split into activation, weight, output, vector and mask memories.

This design's own choices, where the description is silent:

- the command set and every handshake;
- the buffer widths, depths and layouts, and the DMA port;
- the split of work across MP-MPUs;
- the quantizer's exponent rule and rounding;
- all VPU internals, the sequencers, reset values and pipeline depths.

Limits:

- **Tiles are dilated independently.** A mask larger than 64x64 is processed as separate
  tiles, and dilation does not cross tile borders.
- **Convolutions run as matrix products.** The host must arrange 3x3 convolution inputs as
  im2col rows in the vector buffer before quantization.
- **K is limited per pass.** A pass holds 31 K blocks (992 input channels). Longer
  reductions are split and their BF16 partial results added on the VPU, which adds one
  rounding per split.
- **Refinement is the host's job.** The attention-based refinement mask is computed by the
  host, and so is the every-5-timesteps schedule.
- **No overlap.** Commands do not overlap, so DMA and compute never run concurrently.
- **Power and clocking are not modelled.** There is no clock gating or power management, and
  the memories are plain arrays rather than SRAM macros.

## 10. Files

| file | contents |
|------|----------|
| `rtl/masq_pkg.sv` | formats, stage/precision table, command struct |
| `rtl/masq_fp_pkg.sv` | FP32 add/mul, exp, reciprocal, rsqrt (functions) |
| `rtl/masq_sam.sv`, `masq_adder_tree.sv`, `masq_fxd2bf16.sv`, `masq_fp32_add.sv`, `masq_bmpe.sv` | the BMPE and its parts |
| `rtl/masq_mpu_ctrl.sv`, `masq_mpmpu.sv` | MP-MPU |
| `rtl/masq_mask_dilator.sv`, `masq_mask_updater.sv`, `masq_mask_downsampler.sv`, `masq_mask_manager.sv` | mask manager |
| `rtl/masq_quantizer.sv`, `masq_vpu.sv` | quantizer, vector unit |
| `rtl/masq_buffer.sv`, `masq_dma.sv`, `masq_top_ctrl.sv` | memories, DMA, command controller |
| `rtl/masq_gemm_seq.sv`, `masq_quant_seq.sv`, `masq_vpu_seq.sv` | sequencers that run GEMM, QUANT and VPU commands |
| `rtl/masq_top.sv` | the accelerator |
| `tb/tb_<module>.sv` | self-checking testbench of each block |
| `tb/tb_masq_top.sv` | end-to-end test at reduced size (2 MP-MPUs of 4 BMPEs) |
| `tb/tb_masq_top_full.sv` | one layer step at the default size |
| `tb/masq_ext_mem.sv`, `tb/masq_tb_pkg.sv` | external memory model, real-number helpers |

## 11. Simulating

Every testbench prints one line, `TB_RESULT checks=N failures=M`, and stops itself with a
watchdog. The testbenches use no files and need no options beyond the include path. For
example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/masq_pkg.sv rtl/masq_fp_pkg.sv tb/masq_tb_pkg.sv tb/tb_masq_top.sv \
    --top-module tb_masq_top -Mdir obj_top
./obj_top/Vtb_masq_top
```

The same pattern works for every `tb/tb_*.sv`: replace the testbench file and the top module
name.

What the testbenches check:

- **Arithmetic blocks** are compared with independent real-number or integer references:
  - the SAM exhaustively;
  - the converters and adders on random and corner values;
  - the BMPE and MP-MPU on random blocks of every format, including cycle counts.
- **Mask units** are compared with a brute-force Chebyshev-distance reference, a promotion
  reference and a majority reference.
- **The end-to-end test** runs the following sequence:
  1. DMA loads.
  2. Dilation, update and downsampling.
  3. Quantization and GEMM at timesteps 0, 10 and 20.
  4. Group-norm, softmax-maximum and SiLU passes.
  5. A DMA store.

  Throughout, the external memory stalls randomly. The test checks every intermediate result
  and the MP-MPU cycle count. It also counts each mechanism (back-pressure, each format, both
  downgrades, promotions, group-norm and softmax exclusion) and fails if any of them never
  occurred.
- **The full-size test** (`tb_masq_top_full`) runs one complete layer step at the default
  parameters: four tokens with stages 3, 2, 1, 0 through all 32 MP-MPUs, with all 4096
  results checked. Verilating and compiling 1024 BMPEs takes well over ten minutes on a
  four-core machine, and this test has not yet been run to completion. The largest
  configuration simulated end to end is the top with `NUM_MPU = 2` and `NB = 4`
  (8 BMPEs, `tb_masq_top`). The MP-MPU was also simulated alone with 4 BMPEs.
