# LightMat-HP: block-floating-point GEMM on sliced photonic multipliers

LightMat-HP multiplies FP32 matrices on a photonic-electronic accelerator.
Its photonic multipliers are only reliable for a few bits, far fewer than FP32
needs. The design closes that gap in two steps:

1. **Block floating point (BFP).** Each row of an A tile and each column of a
   B tile is given one shared exponent. Every element keeps only a sign and a
   short integer mantissa. A dot product then becomes a sum of small integer
   products, scaled once by 2^(E_A + E_B).
2. **Mantissa slicing.** A 10-bit mantissa is cut into two 5-bit slices. The
   four slice products a1·b1, a2·b1, a1·b2 and a2·b2 are computed in analog on
   four Mach-Zehnder modulators (MZMs). Digital logic then shifts and adds them
   back into the full 20-bit product.

This repository is synthesizable SystemVerilog for the digital part of that
system. It covers FP32-to-BFP conversion, slicing and flattening into the DAC
sample memories, sample capture, recombination, result reassembly,
BFP-to-FP32 conversion, tile scheduling over 100 parallel Photonic
Processing Units (PPUs), and result concatenation. The analog path (DACs,
laser, MZMs, demultiplexer, photodetectors and ADCs) is represented by a
behavioural model of an ideal multiplier, so the whole chip can be simulated
end to end.

## 1. Number format

FP32 input is `{sign, exp[7:0], frac[22:0]}` (`fp32_t` in `lmhp_pkg`).

For a block of values x_1..x_K (one row of A or one column of B) and a
mantissa width b:

```
e_s  = floor(log2 max|x_i|) - (b - 1)            shared exponent
m_i  = round_half_up(|x_i| / 2^e_s), at most 2^b - 1    mantissa magnitude
x_i ~= (-1)^s_i * m_i * 2^e_s
```

- **Mantissa width.** b counts magnitude bits, and the sign is kept separately
  as its own bit. The published text calls b "including the sign bit". Its
  format and slicing figures, however, show a separate sign bit beside a full
  10-bit mantissa that is split into two 5-bit slices. This RTL follows the
  figures.
- **Exponent range.** e_s is a 6-bit two's-complement number (-32..31). An
  exponent outside that range is clamped and raises the sticky `sat` flag.
- **Special values.** Zero and subnormal inputs become a zero mantissa.
  Inf/NaN saturate and set `sat`.
- **All-zero blocks.** A block of only zeros gets e_s = -32.
- **Run-time width.** `cfg_mant_bits` selects b from 2 to 10 at run time
  (default 10).

A dot product of row i of A and column j of B is then

```
P   = sum_t (+-)mA[i][t] * (+-)mB[t][j]         exact signed integer, 33 bits
C   = P * 2^(E_A[i] + E_B[j])                    rounded to FP32, nearest-even
```

Because P is exact, the only errors are the BFP quantisation of the inputs and
the final FP32 rounding. For data drawn uniformly from [1, 100], the
default-size simulations stay within 0.11 % (16×16) and 0.04 % (128×128)
relative error of the FP32 product.

## 2. Slicing and flattening: how a tile pair is laid out in time

A PPU computes an L×L output tile (L = 2) from an L×K tile of A and a K×L tile
of B. Each mantissa is split into slices:

```
a = a1·2^5 + a2      b = b1·2^5 + b2      (5-bit slices, a1/b1 high)
a·b = (a1b1 << 10) + ((a2b1 + a1b2) << 5) + a2b2
```

Two DAC Players hold the a-slices and two hold the b-slices. Modulators
MZM1/MZM2 carry a1 and a2 on two wavelengths, and MZM3/MZM4 multiply them by
b1 and b2. The four photodetector/ADC channels therefore see a1b1, a2b1, a1b2
and a2b2 in the same sample.

To cover all L·L output elements in a single play, the operand streams are
**flattened** so that sample s multiplies the right pair:

- **A stream:** the A tile in row-major order, repeated L times:
  `a[0][0..K-1], a[1][0..K-1], a[0][0..K-1], a[1][0..K-1]`.
- **B stream:** each column of B repeated L times:
  `b[..][0], b[..][0], b[..][1], b[..][1]` (K samples each).

Group g (samples g·K .. g·K+K-1) therefore forms the dot product of A row g mod
L with B column g div L. The groups come out in column-major order
(c00, c10, c01, c11). The Block Splicer turns them back into row-major order.

One play is L·L·K samples. With the 32 KB sample memories, taken as 16384
two-byte samples, K can be at most 4096.

The sign of each operand is not sent to the analog path. Light intensities are
non-negative, so the products are computed on magnitudes. The sign travels as
an extra tag bit in the word of the high-slice DAC Player. The PPU XORs the A
and B tags, delays the result by the photonic latency, and stores it next to
the a1b1 capture. The DPPU negates the recombined product when the tag is set.

## 3. One processing lane

```
 A row stream ─► FP2BFP(A) ─ mantissas ─► MPU1 ─► DAC Player1 (a1+tag) ─┐
                     │                          DAC Player2 (a2)     ─┤ photonic  ┌► ADC Capture1..4 ─► DPPU ─► Block Splicer ─┐
 B col stream ─► FP2BFP(B) ─ mantissas ─► MPU2 ─► DAC Player3 (b1+tag) ─┤  core     │                                             │
                     │                          DAC Player4 (b2)     ─┘ (MZM1..4) ┘                                             ▼
                     └───────── shared exponents E_A[0..L-1], E_B[0..L-1] ───────────────────────────────────────────────► BFP2FP ─► FP32 tile
```

`lmhp_lane` consists of two FP2BFP converters, one PPU and one BFP2FP
converter. The shared exponents go around the PPU straight to the BFP2FP
register files.

| stage | module | cycles per tile pair (L = 2) |
|---|---|---|
| convert | `fp2bfp` | first collects a K-value block while tracking the largest exponent, then emits mantissas; the shared exponent is out 2 cycles after the last input |
| slice and flatten | `mpu` | one mantissa every L cycles, because each slice is written to L memory addresses; L·L·K cycles for the tile pair |
| play and capture | `dac_player`, `photonic_core`, `adc_capture` | L·L·K samples, one per cycle, plus the photonic latency (4 cycles assumed) |
| recombine and sum | `dppu` | one sample per cycle; L·L·K + 1 cycles until the last group result |
| reorder | `block_splicer` | L·L elements, row-major, with valid/ready handshake |
| rescale | `bfp2fp` | one registered stage; normalisation with round to nearest, ties to even |

The PPU runs its tile pair as LOAD → PLAY → DRAIN → POST → SPLICE. It is
idle again once its tile has been handed on.

## 4. The whole chip

`lightmat_hp_top` contains the scheduler, NUM_PPU = 100 lanes, and the result
concatenator.

- **Scheduler.** It cuts A (M×K) into ⌈M/L⌉ row tiles and B (K×N) into ⌈N/L⌉
  column tiles. It works in rounds:
  1. Wait until every lane is idle.
  2. Give up to 100 tile pairs, in (p, r) order, to lanes 0, 1, 2, …
  3. Stream block j = 0..L-1 to each assigned lane in turn: row j of the A
     tile on the A port and column j of the B tile on the B port, K values
     at one value per cycle.

  A block starts only when both converters of the lane are ready. One idle
  cycle follows each block. Rows past M and columns past N are sent as zeros;
  memory is not read for them.
- **Result concatenator.** It grants one lane per cycle by round-robin and
  writes the element to `base_c + row·N + col`. Elements that belong to
  zero padding are dropped and counted in `n_cropped`.

### Interface

| port | meaning |
|---|---|
| `cfg_m`, `cfg_n`, `cfg_k` | matrix sizes: A is M×K, B is K×N (K ≤ K_MAX = 4096) |
| `cfg_mant_bits` | BFP mantissa width, 2..10 |
| `base_a`, `base_b`, `base_c` | word addresses of the row-major matrices |
| `start` / `done` | pulse `start`; `done` stays high from the end of the run until the next `start` |
| `mem_a_en/addr/data`, `mem_b_*` | two read ports with one-cycle latency (data arrives the cycle after `en`) |
| `mem_c_we/addr/data` | write port |
| `sat`, `n_written`, `n_cropped` | sticky saturation flag; element counters for the current run |

Each memory word holds one FP32 value. There is one clock and a synchronous,
active-high reset.

### Throughput of this RTL

The scheduler feeds all lanes from one A port and one B port. In the
full-size simulation it streams about (K+1)·L cycles per tile pair, and this
is what limits the speed:

- a 16×16×16 product takes 2547 cycles;
- a 24×20×24 product (144 tile pairs, two rounds) takes 6917 cycles;
- a 64×64×64 product (1024 tile pairs, 11 rounds) takes 143431 cycles;
- a 128×128×128 product (4096 tile pairs, 41 rounds) takes 1122275 cycles.

The published system gets its throughput from wide memory and DAC/ADC
bandwidth that this single-port interface does not model. Widening the
scheduler's ports is the natural next step.

## 5. Parameters

| parameter | default | origin |
|---|---|---|
| `NUM_PPU` | 100 | evaluated configuration |
| `L` (output tile edge) | 2 | evaluated configuration (2×2 tile per PPU) |
| `MANT_W` | 10 | evaluated configuration |
| `SLICE_W` | 5 | evaluated configuration (two 5-bit slices) |
| `EXP_W` | 6 | evaluated configuration |
| `DEPTH` (samples per DAC Player / ADC Capture) | 16384 | 32 KB per memory, assuming 2-byte samples |
| `K_MAX` | 4096 | DEPTH / (L·L) |
| DAC / ADC code width | 14 / 12 | prototype converter resolutions |
| `PHOT_LAT` | 4 | assumed |
| `AW`, `DW` (address, dimension width) | 24, 16 | assumed |
| accumulator width | 33 | 2·MANT_W + log2(K_MAX) + 1 |

`MANT_W` must equal 2·`SLICE_W`.

## 6. The photonic core model

`photonic_core` is a behavioural model, not synthesizable analog. It ports one
14-bit DAC code per MZM into four 12-bit ADC codes. Each code is the exact
product of its pair of slices, saturated to 12 bits, after a fixed latency.
The model leaves out modulator non-linearity, bias drift, noise, calibration
and the DAC/ADC sample rates. The 5-bit slices give products of at most 961,
which fits in 12 bits, so the model is exact. In hardware, the analog error
of this stage is what slicing keeps small.

## 7. Departures from the published design

- **Slices.** Only the two-slice mapping is built: mantissas up to 10 bits,
  with all four sub-products in one pass. The publication also maps wider
  mantissas (up to 20 bits, four slices) over several passes or several PPUs.
  That mapping is absent, so its 11-20-bit mantissa sweep cannot run on this
  RTL.
- **Mantissa width.** b is taken as magnitude bits with a separate sign (see
  section 1). Rounding is half-up. The text allows "rounding or truncation".
- **Exponent clamping.** Clamping the 6-bit exponent, and the `sat` flag, are
  this design's own additions.
- **Memory hierarchy.** External memory is modelled as a word-addressed port
  with one-cycle latency. The 16 MB global SRAM and the controller appear in
  the published area table only by name and are not built. The host software
  of the prototype is also outside this RTL.
- **Clocking.** There is one clock. The prototype's separate streaming clocks
  and converter rates are not modelled; every block moves one sample or value
  per cycle.
- **Own design choices.** The scheduler policy (rounds, block order), the
  round-robin concatenator, the PPU sequencing FSM, the FP2BFP buffer, and
  the sign tag bit are design choices where the publication gives only the
  function.

## 8. Verification

Every block has a self-checking testbench in `tb/`. Each uses an independent
reference model in `tb_ref_pkg` (FP32 decode/encode with round-to-nearest-even,
shared exponent and mantissa computed from the formulas above) and checks
results bit for bit:

| testbench | what it covers |
|---|---|
| `tb_fp2bfp` | random blocks, all mantissa widths, zeros, subnormals, infinity, exponent clamp, back-pressure |
| `tb_mpu` | slice values, flattened write addresses for A and B, pacing |
| `tb_dac_player`, `tb_adc_capture` | playback order and timing, capture limits |
| `tb_photonic_core` | four products, latency, saturation |
| `tb_dppu` | recombination shifts, signs, group sums, latency L·L·K + 1 |
| `tb_block_splicer` | column-major to row-major reordering with back-pressure |
| `tb_ppu` | tile pair through the whole PPU, play length L·L·K in one burst |
| `tb_bfp2fp` | rescaling, normalisation, ties to even |
| `tb_lmhp_lane` | random tiles through a complete lane |
| `tb_scheduler` | tile assignment, addresses, padding, rounds, `done` |
| `tb_result_concat` | placement, cropping, round-robin fairness |
| `tb_lightmat_hp_top` | 3 lanes, many shapes, end to end |
| `tb_lightmat_hp_full` | default parameters, U[1,100] data: 16×16, a two-round 24×20×24, 64×64 and 128×128 |

`tb_lightmat_hp_top` counts the following, and fails if any of them never
happens:

- cropped edge tiles;
- several scheduling rounds;
- FP2BFP stalled by the MPU;
- concatenator contention;
- 10-bit and narrower mantissas;
- negative products;
- zero inputs;
- a clamped exponent;
- a restart after `done`.

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

To simulate with Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb rtl/lmhp_pkg.sv tb/tb_ref_pkg.sv \
    tb/tb_lightmat_hp_top.sv --top-module tb_lightmat_hp_top -Mdir obj -o sim
./obj/sim
```

Replace the testbench name to run another one. Verilator finds the modules it
needs in `rtl/` by file name. The full-size testbench takes about two minutes to
build and run.

## 9. Files

- `rtl/lmhp_pkg.sv`: FP32 type, default sizes, shift helpers.
- `rtl/fp2bfp.sv`, `rtl/mpu.sv`, `rtl/dac_player.sv`, `rtl/photonic_core.sv`,
  `rtl/adc_capture.sv`, `rtl/dppu.sv`, `rtl/block_splicer.sv`: parts of a PPU
  and of its converters.
- `rtl/ppu.sv`: one PPU.
- `rtl/bfp2fp.sv`: BFP-to-FP32 conversion.
- `rtl/lmhp_lane.sv`: one lane.
- `rtl/scheduler.sv`, `rtl/result_concat.sv`: tile distribution and C
  assembly.
- `rtl/lightmat_hp_top.sv`: the chip.
- `tb/`: the testbenches listed above, plus `tb_ref_pkg.sv`.
