# Variable-point beamspace equalizer

In a millimetre-wave massive-MIMO base station, linear equalization is
often carried out in *beamspace*: the received vector and the equalization
matrix are taken through a spatial DFT first. This makes them sparse. Most
entries are close to zero and a few are large. Sparsity lowers the work
per symbol, but it widens the dynamic range. A fixed-point (FXP) datapath
then needs one to two more bits per operand than the same equalizer in the
antenna domain, and the multipliers, the largest part of the circuit, grow
with those bits.

*Variable point* (VP) is a number format that keeps the multipliers narrow.
A VP number is a short two's-complement significand `m` plus a small
*exponent index* `i`. The index selects one entry of a fixed list `f` of
fractional lengths, chosen when the hardware is built. The value is
`m * 2^-f[i]`. A VP multiplier is an ordinary integer multiplier on the
significands. The index of the product is the concatenation of the operand
indices: the product's list of fractional lengths is the pairwise sum of
the operand lists, and it is also fixed when the hardware is built. No
exponent is added at run time. Additions stay in FXP, so every product is
converted back to FXP right after the multiplier.

This repository holds synthesizable SystemVerilog for a complete VP-based
matrix-vector multiplier for beamspace LMMSE equalization, `s = W y`,
with B = 64 antennas and U = 8 users. It also holds self-checking
testbenches for every module. The architecture and the number formats follow
a published VP design. The points where this RTL had to choose for itself
are listed in [Departures and own choices](#departures-and-own-choices).

## The VP format in one example

Take `VP(6, [3, 2, 0, -1])`: a 6-bit significand and a 2-bit index. The bit
pattern `110010 00` has `m = -14` and `i = 0`, so `f[0] = 3` and
`x = -14 * 2^-3 = -1.75`. With `i = 3` the same significand would mean
`-14 * 2 = -28`. The list need not be contiguous, symmetric or sorted.
Each signal of a design gets its own list, fitted to its statistics.

The two VP signals of the equalizer are:

| signal | FXP format on the port | VP format | values covered per index |
|---|---|---|---|
| weight `W` | FXP(12,11), range [-1, 1) | VP(7, [11, 9, 7, 6]) | i=0: \|x\| < 2^-5 with LSB 2^-11; i=1: < 2^-3, LSB 2^-9; i=2: < 2^-1, LSB 2^-7; i=3: all, LSB 2^-6 |
| sample `y` | FXP(9,1), range [-128, 128) | VP(7, [1, -1]) | i=0: \|x\| < 32 with LSB 0.5; i=1: all, LSB 2 |

So a 7-bit significand covers a 12-bit weight: small weights keep full
resolution, and large weights lose LSBs that matter little relative to
their size. Both lists follow one rule: the largest fractional length equals
the FXP format's `F`, so the smallest inputs convert exactly. The smallest
fractional length leaves as many integer bits as the FXP format has,
`W - F = M - min(f)`, so no input can overflow.

## FXP to VP conversion (`fxp2vp`)

The converter finds the first entry of the list, sorted from the largest to
the smallest fractional length, at which the input still fits. It then cuts
the M-bit field at that position:

1. For each option `k`, the bits `x[W-1 : M+(F-f_k)-1]` are compared for all-equal.
   Equal bits mean that they are all sign copies, so the integer part of `x` fits
   into the `M - f_k` integer bits of the significand.
2. A leading-one detector (`vp_lod`, a priority encoder) returns the
   smallest `k` whose check passed. That index is `i`.
3. `i` selects `m = x[(F-f_i)+M-1 : F-f_i]`. The bits below the field are
   dropped (truncation towards minus infinity).

For the weight format the checked MSB groups are `x[11:5]`, `x[11:7]`,
`x[11:9]` and `x[11:10]`. The fields are `x[6:0]`, `x[8:2]`, `x[10:4]`
and `x[11:5]`. For `y` the groups are `x[8:6]` and `x[8]`, which is always
equal. The fields are `x[6:0]` and `x[8:2]`. The converter is purely
combinational: K comparators, one priority encoder and one K-input
multiplexer of M bits.

## Products and the way back to FXP (`vp_mult`, `vp2fxp`)

A product of a `y` and a `W` significand has 14 bits. Its 3-bit index is
`{i_y, i_w}`, and its fractional length is `f_y[i_y] + f_w[i_w]`:

| product index | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| fractional length | 12 | 10 | 8 | 7 | 10 | 8 | 6 | 5 |
| right shift `S_k` into FXP(21,12) | 7 | 5 | 3 | 2 | 5 | 3 | 1 | 0 |

`vp2fxp` appends `W - M` zero LSBs to the significand. It shifts that word
arithmetically right by `S_k = (W-F) - (M-f_k)`, one fixed shift per option,
and lets the index pick the result. Each shift is only wiring plus sign
copies, so the converter is a multiplexer. The output format FXP(21,12) is
exact for every product. It is also the format a plain FXP(9,1) x
FXP(12,11) multiplier would deliver, so everything after the converters is
the same as in an FXP equalizer.

## The equalizer (`bvp_mvm`)

```
 x_1..x_B (Re, Im), LW, SP, tau_y, tau_w
        |
        +--> cspade_thr (one per antenna) -----------------------> c_b (small operand)
        |
        +--> vp_in_conv (two per antenna: Re and Im)
        |      FXP2VP-Y (low 9 bits) --+
        |      FXP2VP-W (12 bits)    --+-- LW mux --> x_VP (7-bit m, 2-bit i)
        |
        +--> broadcast to U dot product units
              dotp u = 0..U-1
                dotp_ctrl:  LW -> LW_u (row u of the load burst)
                sp_cm_vp x B: weight regs (LW_u), y regs, 4 x (vp_mult + vp2fxp),
                              Re = yR wR - yI wI, Im = yR wI + yI wR, product reg
                adder_tree x 2 (Re, Im): B operands, log2(B) register levels
                --> s_u (Re, Im), FXP(28,12)
```

The design is fully unrolled. Every one of the U x B matrix entries sits
in its own complex multiplier, so a new received vector can enter in every
clock cycle.

**Loading the matrix.** The matrix rows enter through the same ports as the
received vectors. Hold `lw = 1` for U consecutive cycles and apply row 0,
row 1, ... row U-1. Each `dotp_ctrl` counts the cycles of the burst and
enables the weight registers of its own DOTP only in its cycle. The counter
restarts whenever `lw` is low, so a new burst always starts again at row 0.
While `lw = 1` the port carries FXP(12,11), the multiplexers forward the
weight conversions, and each SP-CM stores the weight's CSPADE flag along
with it.

**Equalizing.** Every cycle with `lw = 0` applies one received vector. The
port then carries FXP(9,1) in its 9 LSBs, and the upper 3 bits are ignored.
The result for the vector applied in the cycle after edge `t` is on `s_re`
and `s_im` after edge `t + 2 + log2(B)`, marked by `s_valid`. For B = 64
the latency is 8 cycles and the rate is one equalization per cycle.

| cycle (between edges) | 0 .. 7 | 8 | 9 | 10 | ... | 16 | 17 |
|---|---|---|---|---|---|---|---|
| `lw` | 1 | 0 | 0 | 0 | | | |
| ports | rows 0..7 of W | y0 | y1 | y2 | | | |
| `s_valid`, `s` | 0 | 0 | 0 | 0 | | 1, s(y0) | 1, s(y1) |

(B = 64, U = 8: y0 enters in cycle 8 and its result is present in cycle 16.)

## CSPADE power saving

The equalizer can skip work on sparse data. A complex
partial product `W[u][b] * y[b]` contributes almost nothing when both
operands are small. With `sp = 1` such products are not computed and count
as zero. This is an approximation that the thresholds `tau_y` and `tau_w`
control: the result is no longer the exact product of the VP operands.

- `cspade_thr` flags an antenna input as small when `|Re| < tau` and
  `|Im| < tau`. `tau` is `tau_w` while a weight is loaded and `tau_y`
  otherwise, and it is counted in LSBs of the respective FXP format.
- `sp_ctrl` in each SP-CM stores the weight's flag during the load. In every
  cycle it computes `ua = !(sp && c_y && c_w)`, the "unit active" signal.
  The y registers load only when `ua` is set (and `lw` is clear), so a
  skipped lane keeps its old operands and its multipliers do not toggle.
  `ua1` (one cycle later) gates the product register. `ua2` (two cycles
  later) forces the lane output to zero for the adder tree.

With `sp = 0` every product is computed and the output is exact for the
VP-quantized inputs. The power saving is `sp` and can change every cycle.

## Number formats through the datapath

| point | format |
|---|---|
| port, weight | FXP(12,11) |
| port, sample | FXP(9,1), in bits 8:0 |
| multiplier inputs | VP(7,[11,9,7,6]) and VP(7,[1,-1]) |
| multiplier output | 14-bit significand, 3-bit index, list of the table above |
| after vp2fxp | FXP(21,12), exact |
| Re, Im of an SP-CM | FXP(22,12), exact |
| `s_re[u]`, `s_im[u]` | FXP(22 + log2 B, 12) = FXP(28,12), exact |

The output is the full-precision sum. A design that needs fewer bits
downstream would round or saturate after the adder tree.

## Top-level interface

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, all registers on the rising edge |
| `rst_n` | in | 1 | synchronous active-low reset of the control state (load counters, CSPADE flags, valid pipeline) |
| `lw` | in | 1 | 1: the ports carry a matrix row (U-cycle burst); 0: the ports carry a received vector |
| `sp` | in | 1 | CSPADE power saving enable |
| `tau_y`, `tau_w` | in | 12 | thresholds, in LSBs of FXP(9,1) and FXP(12,11) |
| `x_re[B]`, `x_im[B]` | in | B x 12 | antenna inputs (packed array) |
| `s_re[U]`, `s_im[U]` | out | U x 28 | equalized symbols, FXP(28,12) |
| `s_valid` | out | 1 | `s` belongs to a received vector |

The parameters of `bvp_mvm` are `B` and `U`. The number formats are
constants in `vp_pkg`. The converter modules take all of them as parameters.

## Departures and own choices

Taken from the published design: the VP format; the FXP2VP structure
(equality checks, leading-one detector, multiplexer) and the VP2FXP
structure (zero pad, fixed arithmetic shifts, multiplexer); index
concatenation in the multiplier; the B-VP architecture with CSPADE
thresholding, a pair of converters per real input behind an `LW`
multiplexer, U DOTP units of B SP-CMs each, a controller per DOTP and
pipelined adder trees; the SP-CM internals (weight registers enabled by
LW, y registers, four multiplier + VP2FXP lanes, the register gated by UA1
and the zeroing multiplexer driven by UA2, and SP-CTRL with a stored flag
and two delay registers); the number formats; and B = 64, U = 8.

Chosen here, because the published description leaves them open:

- **Product and output formats.** FXP(21,12) after each VP2FXP, and exact
  sums after it. The published design does not say where it rounds.
- **Magnitude test.** `max(|Re|, |Im|) < tau`, with strict comparison.
  Threshold widths and units are also this design's choice.
- **Load protocol.** The rows enter in order in one burst, and the counters
  restart on `lw = 0`. The published design only names the controller.
- **Port sharing.** The sample occupies the low 9 port bits.
- **Adder tree pipelining.** One register after every level.
- **`s_valid`, reset.** `s_valid` and the reset are additions. Datapath
  registers are not reset: their contents are masked by `ua2` and `s_valid`.
- **Fallback index.** `fxp2vp` returns index K-1 when no option fits. This
  cannot happen with lists that satisfy `W - F = M - min(f)`.

Not included: the parts of the receiver around the equalizer (RF chains,
ADCs, beamspace FFT, channel estimation and the computation of `W`). Also
not included are the antenna-domain and pure-FXP equalizers and the
floating-point MAC array, which serve only as comparisons. Area and power
figures depend on a standard-cell flow and are not reproduced here.

## Source files

| file | content |
|---|---|
| `rtl/vp_pkg.sv` | default sizes and number formats |
| `rtl/fxp2vp.sv`, `rtl/vp_lod.sv` | FXP to VP converter and its leading-one detector |
| `rtl/vp2fxp.sv` | VP to FXP converter |
| `rtl/vp_mult.sv` | real VP multiplier |
| `rtl/cspade_thr.sv` | small-operand flag of one antenna |
| `rtl/vp_in_conv.sv` | FXP2VP-Y / FXP2VP-W pair with the LW multiplexer |
| `rtl/sp_ctrl.sv` | CSPADE control of one complex multiplier |
| `rtl/sp_cm_vp.sv` | CSPADE complex VP multiplier |
| `rtl/dotp_ctrl.sv` | row-load controller |
| `rtl/adder_tree.sv` | pipelined B-operand adder tree |
| `rtl/dotp.sv` | dot product unit |
| `rtl/bvp_mvm.sv` | top: the equalizer |
| `tb/vp_ref_pkg.sv` | integer reference model used by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_bvp_mvm_full` |

## Verification

Each testbench prints `TB_RESULT checks=N failures=M`, and a watchdog ends
it with a failure if it hangs. The reference model (`vp_ref_pkg`) works on
integer values, not bit fields. It converts FXP to VP by trying each
fractional length and checking whether `x >>> (F - f)` fits in M signed bits,
and it forms products as `m_y * m_w * 2^(12 - f_y - f_w)`. This checks the
RTL along a different route than the RTL computes.

- `tb_fxp2vp`: all codes of FXP(12,11) -> VP(7,[11,9,7,6]), of FXP(9,1) ->
  VP(7,[1,-1]), and of the small format FXP(8,1) -> VP(6,[1,-1]) against the
  rule "three equal MSBs give index 0 and the low six bits".
- `tb_vp2fxp`: all 2^14 x 8 product codes, and VP(9,[3,1,2,0]) -> FXP(12,3)
  with an unsorted list.
- `tb_vp_mult`, `tb_vp_in_conv`, `tb_cspade_thr`: exhaustive or dense random.
- `tb_sp_ctrl`, `tb_dotp_ctrl`, `tb_adder_tree`: cycle-accurate models,
  including the tree's latency of log2(N) cycles at N = 64 and N = 5.
- `tb_sp_cm_vp`, `tb_dotp`: random VP streams with weight reloads and
  random CSPADE flags. The 2-cycle and 2 + log2(B)-cycle latencies are checked.
- `tb_bvp_mvm` (B = 8, U = 3, 800 vectors) and `tb_bvp_mvm_full` (defaults
  B = 64, U = 8, 120 vectors): end-to-end from FXP ports with sparse,
  high-dynamic-range data. Every output cycle is checked, along with the
  latency, one result per cycle, and that each mechanism occurred: matrix
  load and reload, skipped products, small operands with power saving off,
  and every exponent index of `y` and `W`.

- `tb_bvp_mvm_los` (defaults): a workload test. It generates a single-path
  line-of-sight channel for 8 users at a 64-antenna array, takes it to
  beamspace with a unitary DFT, computes the LMMSE matrix in floating point
  (8 x 8 complex inversion) and scales W and y into the port formats. It
  streams 300 vectors of 16-QAM symbols at 20 dB SNR per antenna, half of
  them with power saving. Besides the exact comparison with the integer
  model, it slices the outputs to 16-QAM. Hardware decisions may make at
  most 1% more symbol errors than floating-point LMMSE. In the shipped
  configuration both make none, the hardware output is within -33 dB NMSE
  of floating point, and power saving skips about 4% of the lane products
  at `tau_y = 4`, `tau_w = 16`.

For every module, a copy with one deliberate bug was run against its
testbench, and each bug was detected. The testbenches check the RTL against
the arithmetic described above. They do not check the equalizer's
bit-error rate against a floating-point LMMSE, which would need channel
models that are not included.

## Simulating and changing it

With Verilator 5, from the repository root:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb rtl/vp_pkg.sv tb/vp_ref_pkg.sv \
          tb/tb_bvp_mvm.sv --top-module tb_bvp_mvm -Mdir obj_tb && obj_tb/Vtb_bvp_mvm
```

Use any other `tb/tb_*.sv` the same way. The full-size test builds in a
couple of minutes.

- **Other array sizes.** Set `B` and `U` on `bvp_mvm`. B need not be a
  power of two: the adder tree pads with zeros.
- **Other number formats.** Edit `vp_pkg`. For each VP signal keep the
  fractional-length list descending, with `max(f) <= F` and
  `W - F <= M - min(f)`; `fxp2vp` and `vp2fxp` stop elaboration if a list
  does not fit. The SP-CM builds the product list from the two operand
  lists itself. `PW`/`PF` must hold the extreme products, so `PF >= max` of
  the product list and `PW - PF >= M_y + M_w - min` of the product list.
  The reference package and the end-to-end value generators assume the
  default formats.
