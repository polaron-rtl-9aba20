# POLARON: a precision-switching edge-AI engine in SystemVerilog

POLARON runs neural-network layers on a bank of identical multiply-accumulate
elements and lets every layer pick its own number format. One layer can use
4-bit integers and the next can use BF16 or 16-bit posits, without
reconfiguring the hardware. The element that makes this possible is the
**PARV-CE** (precision-aware runtime-adaptive vector compute element). It is
a five-stage pipelined dot-product unit. Its single datapath built from 4-bit
multipliers serves eight number formats: narrow formats run many products in
parallel, wide formats combine the small multipliers into one large one.

Around a bank of these elements the engine adds:
- a banked operand memory;
- a per-layer descriptor table with a pre-fetcher;
- a control engine;
- a post-processing chain: conversion to fixed point, scaling, and
  CORDIC-based activation functions;
- AXI4-Lite and AXI4-Stream interfaces to a host.

This RTL implements the engine as it was published, in synthesizable
SystemVerilog. Where the published description names a block but does not
say how it works, the blocks here use the simplest design that does the job.
Those choices are listed at the end and in each file's header.

## 1. Number formats and lanes

Each PARV-CE takes two 128-bit operand vectors `A` and `B` and a 3-bit
`mode`. The mode codes are those of the published element diagram. The one
exception is Var-FxP16, which is listed as supported but has no printed code;
it takes the free code `111`.

| mode | format | lanes × width | multiplier use | `variant` | result format (`out[15:0]`) |
|---|---|---|---|---|---|
| 000 | Var-FxP4 (signed int4) | 16 × 4 b | 16 × 4b | – | int16, saturated |
| 001 | Var-FP8 | 16 × 8 b | 16 × 4b | 0: E4M3, 1: E5M2 | 0: E5M10, 1: E6M9 |
| 010 | Var-FxP8 (int8) | 4 × 8 b | 4 × 8b | – | int16, saturated |
| 011 | Posit8, es=0 | 4 × 8 b | 4 × 8b | – | Posit16, es=1 |
| 100 | BF16 | 4 × 16 b | 4 × 8b | – | BF16 |
| 101 | Var-FP16 | 1 × 16 b | 1 × 16b | 0: E5M10, 1: E6M9 | 0: E5M10, 1: E6M9 |
| 110 | Posit16, es=1 | 1 × 16 b | 1 × 16b | – | Posit16, es=1 |
| 111 | Var-FxP16 (int16) | 1 × 16 b | 1 × 16b | – | int16, saturated |

Lane `l` of a vector sits at bits `[l*w +: w]`, where `w` is the element
width. Bits above the last lane are ignored.

**Fixed-point results.** The fixed-point modes return `ceil(sum / 2^out_shift)`.
The sum is the exact integer dot product, and `out_shift` (0..31) selects how
many of its low bits are fractional.

**Float and posit results.** These are rounded toward +∞, following the
published rounding choice. Overflow behaves as follows:
- A positive float that overflows gives +Inf. A negative one gives the most
  negative finite value, which is the correct direction for round-toward-+∞.
- Posits saturate at ±maxpos.
- A tiny positive value rounds up to minpos. A tiny negative value rounds up
  to 0.

**Special inputs.** Inf and NaN inputs are not treated specially. A posit NaR
reads as zero.

Internally every lane is carried as `(sign, zero, exponent, 16-bit
significand)`. The struct is `polaron_pkg::unpacked_t`, and the exponent is
the weight of the significand's LSB. All later stages are therefore
format-independent, and only stage I knows about formats.

## 2. Inside the PARV-CE

```
 A,B ─► I: unpack ─► II: sign XOR, exp add, max-exp tree, ─► III: align to max exp, ─► IV: 4:2 CSA + carry-select ─► V: LZC, normalise,
 mode     (per lane)    16× 4-bit Booth multipliers             2's complement,            adder, block-floating        round to +∞,
                                                                 4:2 CSA 16→4 words         accumulator, zero-skip       pack → out[15:0]
```

Each stage ends in a register. A pair presented at cycle *t* reaches the
output at *t+5*, and the element accepts one pair per cycle. The control
signals travel down the pipe with the data, so consecutive dot products may
use different formats:
- `in_first` starts a dot product;
- `in_last` ends it and appears as `out_last`;
- `mode`, `variant` and `out_shift` apply to their own pair.

### Stage II: SIMD multiplier

`simd_mul_array` has sixteen 4×4 radix-2 Booth multipliers (`booth_mul4`).
They are used in three ways:
- In 4-bit mode each lane uses one unit.
- In 8-bit mode a lane uses four units, one for each pair of nibbles. The
  partial products are added with shifts of 0, 4, 4 and 8 bits.
- In 16-bit mode all sixteen units form one 16×16 multiplier.

The same stage adds the lane exponents and XORs the signs (`parv_sign_exp`).
A compare-and-select tree finds the largest exponent among the non-zero
lanes.

### Stage III: alignment

Each product is widened with 16 guard bits and shifted right by its distance
from the largest exponent. It is negated when its sign is set. Two levels of
4:2 carry-save compressors (`csa42`) then reduce the 16 terms to four words.
Bits that fall below the guard bits are dropped. This is the only truncation
before final rounding, and it is bounded by the guard width.

### Stage IV: accumulation

Another 4:2 compressor and a carry-select adder (`csla_add`, 8-bit blocks)
turn the four words into one value. That value is added into a 64-bit
accumulator, which has one shared exponent.

**Differing exponents.** When the new value and the accumulator have
different exponents, the one with the smaller exponent is shifted right
before the add. This is the block-floating, quire-like accumulation.

**Zero-skip.** When every lane product is zero, the accumulator is not
touched, and `out_zskip` reports the skipped cycle.

**Not implemented: Kulisch mode.** The published design also mentions an
optional exact (Kulisch-style) accumulation mode. It is not implemented,
because neither its width nor how it is selected is given.

### Stage V: output

The magnitude of the accumulator goes through a leading-zero count. It is
then normalised to the significand width of the result format, rounded
toward +∞ and packed:
- IEEE-style float fields for float modes;
- regime, exponent and fraction for posits;
- a shifted, saturated integer for fixed-point modes.

`out_ovf` flags a result that saturated.

## 3. The engine around the bank

```
 AXI-Lite ─► axil_regs ─► layer_cfg_table ─► isa_prefetcher ─► control_engine ─┐
 AXI-Stream in ─► axis_loader ─► feature_mem ──(act + NUM_CE weights)──► shared_mac_bank (NUM_CE × parv_ce)
                                                                                  │ results
                                          AXI-Stream out ◄─ axis_egress ◄─ post_proc (normalize → scale&shift → DA-VINCI AF)
```

### Dataflow

A layer is a matrix-vector product:
- `feature_mem` has one activation bank and one weight bank per CE. Each is
  `DEPTH` words of 128 bits.
- In every cycle of a layer the control engine reads one activation word and
  broadcasts it to all CEs. In the same cycle it reads one word at the same
  address from each weight bank.
- CE `c` therefore computes output `c` of the layer. After `k_len` vectors
  the bank holds `NUM_CE` results.
- The host brings data in over the input stream. A write to the LOAD register
  points the loader at a bank and start address, then each beat fills the
  next word.
- The loader holds `tready` low while a run is in progress, so the operands
  of a running layer cannot be overwritten.

### Layer descriptors

Each layer is described by 128 bits (`polaron_pkg::layer_desc_t`), written as
four 32-bit words:

| word | bits | field |
|---|---|---|
| 0 | [2:0] | precision mode |
| 0 | [3] | variant |
| 0 | [6:4] | activation (0 none, 1 ReLU, 2 sigmoid, 3 tanh, 4 swish, 5 GELU, 6 SeLU, 7 SoftMax) |
| 0 | [7] | skip this layer |
| 1 | [23:19] | CE fixed-point `out_shift` |
| 1 | [31:24] | activation base address |
| 2 | [7:0] | weight base address |
| 2 | [15:8] | `k_len`, vectors per dot product |
| 2 | [23:20] | post-scale extra shift |
| 3 | [15:0] | Q8.8 scale |
| 3 | [31:16] | Q8.8 bias |

**Pre-fetching.** The pre-fetcher keeps the current descriptor and fetches
the next one while the current layer runs. A layer boundary therefore does
not wait for the table, and each such boundary counts as a pre-fetch hit.

### Control engine states

The control engine moves through these states:
`IDLE → FETCH → ISSUE → WAITMAC → POST → DRAIN → FETCH …`, and ends with
`FINISH`.

- **FETCH.** A descriptor with the skip bit is passed over, which gives an
  early exit for that layer.
- **ISSUE.** Streams the `k_len` vectors.
- **POST.** Sends the `NUM_CE` results to post-processing one per cycle.
  - A SoftMax layer makes two passes. The first accumulates the exponentials
    and emits nothing; the second emits the quotients.
  - An item enters post-processing only while
    `egress FIFO occupancy + items inside post-processing < FIFO_DEPTH`.
    Each cycle held back this way is a stall. This credit rule is what lets
    a slow stream consumer back-pressure the engine without losing results.

The precision mode comes from the descriptor. It therefore changes at every
layer boundary where the descriptor asks for it, and these changes are
counted.

### Post-processing

Post-processing has three cycles of latency.

1. **Normalization.** Converts whatever 16-bit format the CE produced to
   signed Q8.8. Fixed-point results pass through unchanged. Float and posit
   results are truncated toward zero and saturated.
2. **Scale & shift.** Computes
   `y = sat16(((x · scale) >>> (8 + pp_shift)) + bias)`.
3. **DA-VINCI AF.** Works in Q16.16 internally and computes every function
   from one exponential and at most one division:
   - `e^t` is computed by range reduction `t = q·ln2 + r`, then a hyperbolic
     CORDIC in rotation mode: 18 iterations, with iterations 4 and 13
     repeated, and its gain pre-compensated. The constants are `1/K = 79135`,
     `ln2 = 45426` and `1/ln2 = 94548` in Q16.
   - Divisions use a linear CORDIC in vectoring mode.
   - sigmoid = `1/(1+e^-x)`; tanh = `2/(1+e^-2x) − 1`; swish =
     `x·sigmoid(x)`; GELU ≈ `x·sigmoid(1.702x)`; SeLU uses λ = 1.0507 and
     λα = 1.7581.
   - SoftMax is `e^x / Σe^x` over the layer's outputs. Inputs should stay
     below about 5.5 so that `e^x` fits Q8.8.

Saturation in any stage increments the overflow counter and sets a sticky
flag.

### Host registers

AXI4-Lite uses byte addresses and 32-bit words. A write is accepted when the
address and data are both valid.

| offset | register |
|---|---|
| 0x000 | CTRL (bit 0 = start) |
| 0x004 | STATUS: busy, done, overflow, current layer in [15:8] |
| 0x008 | NUM_LAYERS |
| 0x00C | LOAD: bank in [15:8], address in [7:0]; bank 0 = activations, c+1 = weights of CE c |
| 0x010 | overflow count |
| 0x014 | zero-skip count |
| 0x018 | output count |
| 0x01C | skipped layers |
| 0x020 | pre-fetch hits |
| 0x024 | stream beats |
| 0x028 | run cycles |
| 0x02C | stall cycles |
| 0x030 | mode switches |
| 0x100 + 16·L + 4·w | descriptor word w of layer L |

`irq` pulses when a run ends.

## 4. Parameters and sizes

| parameter | default | meaning |
|---|---|---|
| `NUM_CE` | 64 | CEs in the MAC bank. The published evaluations use 64 (LeNet-5) and 256 (VGG-16). |
| `DEPTH` | 256 | words per feature-memory bank |
| `MAX_LAYERS` | 16 | descriptor table entries |
| `FIFO_DEPTH` | 16 | egress FIFO entries |

At the defaults the on-chip weight store is 64 × 256 × 128 bit. That is
65,536 8-bit or 262,144 4-bit weights, enough for one LeNet-5-sized layer at
a time. Networks the size of VGG-16 or YOLOv3-tiny have to be streamed
through in host-managed tiles.

Reset is synchronous and active-high (`rst`) everywhere. There is one clock.

## 5. Files

`rtl/` contains one module or package per file.

| file | content |
|---|---|
| `polaron_pkg.sv` | modes, lane geometry, internal structs, activation codes, descriptor layout |
| `parv_input_proc.sv`, `simd_mul_array.sv` (+ `booth_mul4.sv`), `parv_sign_exp.sv`, `parv_align_csa.sv` (+ `csa42.sv`), `parv_accum.sv` (+ `csla_add.sv`), `parv_out_proc.sv` | the five CE stages |
| `parv_ce.sv` | the pipelined element |
| `shared_mac_bank.sv` | `NUM_CE` elements and their result capture |
| `feature_mem.sv`, `axis_loader.sv`, `axis_egress.sv`, `axil_regs.sv` | memory and interfaces |
| `layer_cfg_table.sv`, `isa_prefetcher.sv`, `control_engine.sv` | configuration and sequencing |
| `pp_normalize.sv`, `pp_scale_shift.sv`, `davinci_af.sv`, `post_proc.sv` | post-processing |
| `polaron_top.sv` | the engine |

`tb/` has one self-checking testbench per block, `tb_<module>.sv`. Each
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog.

- The references are computed independently. `tb/tb_fmt_pkg.sv` decodes every
  format to `real`. Fixed-point results are checked bit-exactly. Float and
  posit results are checked within a tolerance of about two result ULPs plus
  the guard-bit truncation.
- Latencies are checked where they are fixed: 5 cycles for the CE, 6 for the
  bank, 3 for post-processing and 2 for the AF unit.
- `tb_polaron_top` runs the full-size engine (64 CEs, all defaults) as host
  and DMA. It runs seven layers in seven formats, covering a skipped layer, a
  zero vector, an overflowing layer, SoftMax and a throttled output stream.
  It then reads back the counters and requires every one of these mechanisms
  to have occurred.

To simulate one block with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/polaron_pkg.sv tb/tb_fmt_pkg.sv \
          tb/tb_parv_ce.sv --top-module tb_parv_ce -Mdir obj_ce
./obj_ce/Vtb_parv_ce
```

Replace `parv_ce` by any other block name. The full-size top testbench takes
about a minute to build and under a second to run.

## 6. What follows the published design and what does not

**Taken from it:**
- the five-stage CE split and what each stage does: operand unpacking; XOR
  sign and exponent add with a compare tree; sixteen 4-bit radix-2 Booth
  multipliers; alignment to the maximum exponent with two's complement and a
  4:2 CSA; a second CSA with a carry-select adder; leading-zero
  normalisation with round-toward-+∞;
- the 128-bit operands and the 16-bit result;
- the mode codes;
- the set of formats, and which multiplier width each format uses;
- zero-skipping;
- the system blocks and how they connect;
- the list of activation functions and their use of CORDIC;
- the CE counts of the evaluations.

**Choices made here, where the description gives no detail:**
- the FxP16 mode code;
- the FP8 and FP16 sub-formats, and the posit `es` values;
- the result formats and overflow behaviour;
- the guard and accumulator widths;
- the matrix-vector dataflow and bank layout;
- the descriptor and register layouts;
- the stream protocol;
- the control engine's states and credit-based flow control;
- the Q8.8 post-processing format;
- the CORDIC iteration counts, and unrolling the CORDIC into two pipeline
  stages;
- the GELU approximation;
- the two-pass SoftMax;
- the FIFO depth.

**Departures and gaps:**
- Optional Kulisch accumulation is not built.
- Normalisation uses a leading-zero count after the final add, which is how
  the element diagram labels it. The prose describes a leading-zero
  anticipator working in parallel with the add; that is not built.
- The element diagram draws three register rows, but the text counts five
  stages. Five register-terminated stages are built, with the two-step
  accumulation split into stages III and IV.
- The training-side features (on-device learning and the quantization
  algorithm) are software and are not part of this RTL.
- The host CPU, DRAM, AXI interconnect and DMA are not included. The engine
  exposes the AXI-Lite and AXI-Stream ports they would attach to.
- Tiling of layers larger than the memory is left to the host.
