# Bit-exact FP8 arithmetic from integrate-and-fire neurons

Neuromorphic hardware normally gives up exactness: values are carried by
spike rates or spike times and the answer is only approximately right. This
design goes the other way. It treats a single integrate-and-fire (IF) neuron
as a threshold logic gate, builds multiplexers, shifters and adders out of
such gates, and assembles from them an FP8 (E4M3) multiplier and adder whose
results are bit-identical to a correctly rounded floating-point unit. The
units are then arranged as a *spatial* linear layer, `Y = X W^T`: every
product is formed at once, and the products are summed by a binary tree of
adders, so a dot product of length `D_IN` takes `1 + ceil(log2 D_IN)` logical
steps instead of `D_IN`.

The architecture is the "Native Spiking Microarchitecture" with its spatial
adder ("S-Arch") and tree accumulation, proposed for ion-channel (iontronic)
devices that natively integrate and fire. The RTL here is a synthesizable
digital rendering of it: each neuron becomes the logic it computes in one
time step, and one logical step of the architecture becomes one clock cycle.

## 1. The neuron and the gates built from it

`if_neuron` is the primitive. Per time step

    V[t] = beta * V[t-1] + I[t]
    S[t] = (V[t] >= VTH)
    V[t] <- V[t] - VTH * S[t]          (soft reset: the remainder is kept)

The soft reset is what makes the neuron lossless: over any run, spikes times
threshold plus the final residue equals the total charge injected, which is
the carry behaviour of a counter. `beta` (`BETA_NUM / 2**BETA_SHIFT`) models
leakage; `beta = 1` is the ideal IF neuron.

Used with `STATEFUL = 0` the neuron starts every step discharged and its
output is a pure threshold function of the present input. That is how all
logic in the datapath uses it, and it is why leakage cannot disturb the
spatial datapath: no charge is carried from one step to the next.

Potentials are signed integers in half units, so a synaptic weight of 1.0 is
2 and the thresholds 0.5 and 1.5 are 1 and 3:

| gate (`snn_gate`, `snn_mux`) | neurons | current (weights +-1.0)   | threshold |
|------------------------------|---------|---------------------------|-----------|
| AND(a,b)                     | 1       | a + b                     | 1.5       |
| OR(a,b)                      | 1       | a + b                     | 0.5       |
| NOT(a)                       | 1       | 1 - a (bias current 1.0)  | 0.5       |
| XOR(a,b)                     | 2       | a + b - 2*AND(a,b)        | 0.5       |
| MUX(s,a,b) = s ? a : b       | 4       | OR(AND(s,a), AND(NOT s,b))| -         |

The XOR composite is this implementation's choice (the architecture only
calls it a composite gate); it depends on an exact cancellation of the
inhibitory current, which makes it the gate least tolerant of input noise.
`snn_pkg` also holds the single-step neuron and the MUX as functions
(`if_fire`, `mux_fire`); `snn_mux` and the barrel shifter use them so that a
full-size layer is not made of millions of one-gate module instances.
Everywhere else (exponent adders, comparators, the 12-bit adder core) the RTL
uses ordinary operators: in synthesis they become the same threshold logic,
and writing each of them neuron by neuron would add nothing but size.

## 2. Number format

FP8 E4M3 in the `e4m3fn` flavour: 1 sign, 4 exponent and 3 mantissa bits,
bias 7, no infinities, one NaN pattern per sign (`S.1111.111`), largest
finite value 448, smallest subnormal 2^-9.

`fp8_decoder` turns a code into sign, significand `{h, m2, m1, m0}` (hidden
bit `h = (E != 0)`) and the *effective exponent* `E_eff = MUX(E == 0, 1, E)`,
which gives subnormals the exponent `1 - bias` they need. Both engines work
on these fields, so subnormals are never a special case in the datapath.

Rounding is round to nearest, ties to even (`rne_rounder`):
`Round_Trigger = R & (S | L)` with R the first dropped bit, S the OR of all
further dropped bits and L the kept LSB. The increment is applied to
`{exponent, mantissa}` as one number, so a mantissa carry moves into the
exponent and the largest subnormal rounds up into the smallest normal.

Overflow: a result that rounds past 448 becomes NaN, which is what a
float32-to-`float8_e4m3fn` conversion in PyTorch does and therefore what a
bit-exact comparison against it needs. The architecture's test list also
speaks of "saturation"; setting `SATURATE = 1` on any unit clamps to +-448
instead. NaN inputs give NaN (sign not specified), `x + (-x)` gives `+0`,
`-0 + -0` gives `-0`, and a product keeps the sign `SA xor SB` also when it
is zero or underflows.

## 3. The multiplier and the Sticky-Extra correction

`fp8_multiplier` runs three paths in parallel: an XOR gate for the sign, a
5-bit ripple-carry adder for `E_A,eff + E_B,eff` (5 bits so nothing
overflows before the bias is subtracted), and a 4 x 4 Braun array
(`braun_multiplier`) for the significands. The 8-bit product `P` has its
binary point after bit 6, so the unrounded value is
`P / 64 * 2^(E_A,eff + E_B,eff - 14)`.

Normalisation is where exactness is usually lost. For normal x normal
products `P[7:6]` is never 0 and at most a 1-bit adjustment is needed. For a
subnormal x normal product the leading one can sit as low as bit 3, so the
word has to move left by `s = 1..4` places (never further than the
exponent allows; if the exponent would drop below 1 the result is a
subnormal and the word is instead shifted right, the "pre-shift", with the
lost bits going into S).

In this datapath only the top seven product bits `P[7:1]` pass through the
left shifter. The bottom bit is held aside as `sticky_extra`, and after the
shift the correction puts it back in the place the shift would have carried
it to:

| shift s | where `P[0]` belongs | correction                      |
|---------|----------------------|---------------------------------|
| 0, 1, 2 | below the round bit  | `S   |= sticky_extra`           |
| 3       | round bit            | `R   |= sticky_extra`           |
| >= 4    | mantissa LSB         | `M0  |= sticky_extra`           |

Without it, a subnormal x normal product with an odd significand product is
rounded from a truncated value and comes out one ULP off in some cases (184
of the 65,536 code pairs with this datapath). The correction costs a
comparator on `s` and three OR gates. The architecture names the mantissa
target `M2`; since `s` cannot exceed 4 for any product that is not flushed
to a subnormal, the bit can only ever land on the mantissa LSB, and that is
where this RTL puts it.

## 4. The spatial adder

`fp8_adder` is one combinational network in five stages:

1. **Alignment.** The larger magnitude is found by comparing the 7-bit
   magnitude codes (E4M3 codes are ordered like their values). Both
   exponent differences are computed and a MUX picks the non-negative one:
   `dE = MUX(|A| >= |B|, E_A - E_B, E_B - E_A)`, range 0..14.
2. **Barrel shifter.** The smaller significand is widened to the 12-bit
   internal format `[h m2 m1 m0 g0..g7]` (eight guard bits) and shifted
   right by `dE` in four MUX levels (shifts of 1, 2, 4, 8).
3. **12-bit core.** Add, or subtract when the signs differ (the larger
   minus the smaller, so the result is never negative). 13-bit result.
4. **Normalisation.** A carry-out shifts right by one and raises the
   exponent. Otherwise the leading zero detector (`lzd`, a log-depth tree)
   gives the position P of the first one and the word moves left by P,
   `E = E_max - P`, with the shift capped so the exponent stays at least 1
   (the result is then subnormal).
5. **Rounding**, as above, with R = bit 7 and S = OR of bits 6..0.

The shifter also reports the OR of every bit it pushes out, and that bit is
ORed into `g7`. The exhaustive test shows that for E4M3 this sticky bit never
changes a result: eight guard bits are already enough to round every sum
correctly. It is kept because it costs a few gates and makes the core safe
for wider formats.

## 5. The linear layer

`snn_linear_layer` (the top) computes `Y[b][j] = sum_k X[b][k] * W[j][k]`:

* **Broadcast multiplication.** `B * D_OUT * D_IN` multipliers produce all
  products at once; they are registered (logical step 1).
* **Tree accumulation.** One `fp8_adder_tree` per output. Level `l` adds
  neighbouring pairs of level `l-1`, every level is registered, and the
  inputs are padded with `+0` up to a power of two.

Timing: `in_valid` with `x`, `w` in; `out_valid` with `y` exactly
`1 + ceil(log2 D_IN)` cycles later (9 at the default `D_IN = 256`). The
pipeline takes a new input every cycle; there is no back-pressure. Reset is
asynchronous, active low, and clears all pipeline registers.

Defaults: `D_IN = 256`, the architecture's typical size. `B = 1` and
`D_OUT = 4` are this implementation's choice; the architecture leaves them
open. At these defaults the layer holds 1024 multipliers and 1020 adders.

Summation order. Every partial sum is rounded to FP8, and FP8 addition is
not associative, so the tree result can differ by an ULP from a sequential
sum of the same products. That is inherent in the architecture, not an
error; the testbenches compare against a reference that adds in the tree's
order.

Latency against a serial design: a sequential accumulation needs `D_IN`
dependent additions (256 steps at `D_IN = 256`), the tree needs 9.

## 6. What is not here

* The bit-serial "temporal" adder, offered as the small-area alternative,
  is described only by its latency (19 steps) and neuron count; it has no
  RTL here.
* Leakage and noise tolerance are analog properties of the devices. The
  leaky neuron is modelled (`beta`), but the digital gates evaluate from a
  discharged state, which is exactly why leakage does not affect them.
  Noise is not modelled.
* Neuron counts. The architecture quotes about 670 neurons for a multiplier
  and about 1042 for an adder. This RTL does not reproduce those counts: only
  the gates that characterise the design (MUX cells, sign XOR, rounding
  gates) are written as neurons, the rest as ordinary logic.
* Non-linear layers (softmax, GeLU, normalisation) and any controller,
  memory or I/O around the layer are outside the architecture as described.

## 7. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench                  | what it checks |
|----------------------------|----------------|
| `tb_if_neuron`             | ideal, leaky and single-step neurons against an integer model; soft-reset charge conservation; reset |
| `tb_snn_gate`, `tb_snn_mux`| full truth tables |
| `tb_fp8_decoder`           | all 256 codes: flags, effective exponent, value |
| `tb_braun_multiplier`      | all products at N = 4 and N = 5 |
| `tb_rne_rounder`           | every input combination, both overflow policies |
| `tb_barrel_shifter`        | every 12-bit word x every shift, sticky bit |
| `tb_lzd`                   | every 12-bit and 8-bit word |
| `tb_fp8_multiplier`        | all 65,536 operand pairs |
| `tb_fp8_adder`             | all 65,536 operand pairs, plus cancellation, subnormal/normal boundary and overflow cases |
| `tb_fp8_adder_tree`        | streamed random vectors, N = 8 and N = 5 (padding), 3-cycle latency |
| `tb_snn_linear_layer`      | B = 2, D_IN = 16, D_OUT = 3; 400 random inputs, latency 5, and counts of each datapath event (subnormal x normal, Sticky-Extra needed, subnormal results, cancellation, rounding, overflow, NaN, back-to-back) |
| `tb_snn_linear_layer_full` | the layer at its default size, three back-to-back inputs, latency 9 |

All of them pass, so the multiplier and the adder are bit-exact against
correctly rounded E4M3 arithmetic over their entire input space, and the
layer's latency and ordering are checked cycle by cycle. What has not been
done: gate-level simulation, timing analysis, or any check of the layer at
sizes other than the two simulated.

The reference model (`tb/fp8_ref_pkg.sv`) is independent of the RTL: it
converts codes to `real`, adds or multiplies in double precision (exact for
two FP8 operands) and rounds back with its own ties-to-even conversion.

To run one with plain Verilator (from the directory holding `rtl/` and `tb/`):

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/snn_pkg.sv tb/fp8_ref_pkg.sv tb/tb_fp8_adder.sv \
        --top-module tb_fp8_adder -o sim
    ./obj_dir/sim

The default-size layer is large (about two thousand FP8 units); Verilator
needs several minutes and several GB of memory to build it. The reduced
`tb_snn_linear_layer` builds in about a minute.

## 8. Files

| file | contents |
|------|----------|
| `rtl/snn_pkg.sv` | format constants, `fp8_t`, `fp8_unpacked_t`, gate enum, neuron/MUX functions |
| `rtl/if_neuron.sv` | IF / LIF neuron with soft reset |
| `rtl/snn_gate.sv`, `rtl/snn_mux.sv` | threshold gates, 4-neuron MUX |
| `rtl/fp8_decoder.sv` | field unpacking, effective exponent |
| `rtl/braun_multiplier.sv` | significand array multiplier |
| `rtl/rne_rounder.sv` | RNE rounding, packing, overflow policy |
| `rtl/barrel_shifter.sv`, `rtl/lzd.sv` | adder alignment and normalisation |
| `rtl/fp8_multiplier.sv`, `rtl/fp8_adder.sv` | the two arithmetic engines |
| `rtl/fp8_adder_tree.sv` | pipelined reduction tree |
| `rtl/snn_linear_layer.sv` | top: the linear layer |
