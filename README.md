# A streaming Householder datapath for the DBU-OFDM data transform

DBU-OFDM ("deep block-unitary OFDM") is an OFDM waveform in which the data
subcarriers of each OFDM symbol are mixed by a learned unitary matrix
`U_data` before the IFFT. Pilot and null subcarriers are left alone. The
receiver undoes the mixing with `U_data^H` after its usual one-tap
equalizer. Because the matrix is unitary, the rest of the OFDM chain works
unchanged: cyclic prefix, FFT diagonalisation of the channel, comb pilots and
guard bands. The learned mixing spreads every data symbol over many
subcarriers. This lowers the peak-to-average power ratio and buys frequency
diversity.

`U_data` is not stored as a dense matrix. It is kept as a product of `K`
Householder reflections and one diagonal phase matrix:

```
U_data = D · H_1 · H_2 · … · H_K ,   H_k = I − 2 u_k u_kᴴ ,   ‖u_k‖ = 1
D      = diag(e^{j d_1}, …, e^{j d_Ndata})
```

`K` sets the cost: each reflection adds one vector of `N_data` complex
numbers. This RTL computes `y = U_data x` (transmitter) or `y = U_dataᴴ x`
(receiver) on a serial stream of complex samples. It takes one sample per
clock and uses no block RAM. The rest of the OFDM chain (QAM mapping,
pilot/guard insertion, IFFT/FFT, cyclic prefix, equalizer) is outside this
RTL; it is conventional OFDM and is not part of the design described here.

Default size: `N_DATA = 206` data subcarriers and `K = 4` reflections.
206 is the data count of a 256-subcarrier symbol with 2×16 guard, 2 DC and
16 pilot subcarriers.

## 1. From a matrix product to a stream

Applying one reflection to a vector needs no matrix:

```
x_k = x_{k−1} − 2 u_k (u_kᴴ x_{k−1})
```

That is an inner product (one complex scalar `α = u_kᴴ x`), then a scaled
subtraction. The catch for a streaming implementation is that `α` depends on
*every* element of the vector. No output element can be produced before the
last input element has arrived. Each stage must therefore hold a whole
vector.

To halve the number of such buffering points, two consecutive reflections
are merged into one stage. With `x0` in and `x2` out:

```
α1 = u1ᴴ x0        α2 = u2ᴴ x0        ρ = u2ᴴ u1
x2 = x0 − [ 2 α1 u1 + 2 (α2 − 2 α1 ρ) u2 ]
```

The intermediate vector `x1` is never formed. Both inner products are taken
from the same input vector, at the same time. `ρ` depends only on the
parameters. One merged stage therefore costs one vector of buffering for two
reflections. `K` reflections need `K/2` merged stages (`K` must be even).

## 2. One merged stage (`dbu_hh_merged`)

```
            ┌────────────── input FIFO (N_DATA+8 samples) ───────────────┐
 in_x ──────┤                                                            ├─► x0[n] ──►(−)──► out_x
 in_en      │                                                            │             ▲
            └─► MAC α1 = Σ conj(u1[n]) x0[n] ─┐                          │             │
              ► MAC α2 = Σ conj(u2[n]) x0[n] ─┼─► coefficients ──► queue ─► c1·u1[n] + c2·u2[n]
 param RAM (u1[n], u2[n]) ──────────────────────┘   c1 = 2α1                  (2 MACs, rounded)
      └─ MAC ρ = Σ conj(u2[n]) u1[n] while loading   c2 = 2(α2 − 2α1ρ)
```

The stage has two halves that work on different vectors at the same time:

* **Accumulation side.** Every valid input sample is pushed into the input
  FIFO. The same sample goes through two complex multiply-accumulate units
  with `conj(u1[n])` and `conj(u2[n])`, read from the parameter RAM at the
  input index `n`. The sum restarts at `n = 0`.
* **Coefficient step.** When element `N_DATA−1` has been accumulated, the
  data controller rounds `α1`, `α2` and forms `α1·ρ` (one cycle). In the
  next cycle it forms `c1 = 2α1` and `c2 = 2(α2 − 2α1ρ)`. The coefficient
  pair is pushed into a small queue (4 entries, at most 2 in use).
* **Update side.** While a coefficient pair is queued and the FIFO is not
  empty, one sample per clock is popped. It is combined with `u1[n]` and
  `u2[n]` from the RAM's second read port, at the output index, and the
  result `x0[n] − (c1 u1[n] + c2 u2[n])` is registered. The queue entry is
  dropped after the vector's last element.

Because the two sides use different RAM ports and the FIFO holds more than
one vector, vector *m+1* is accumulated while vector *m* is being corrected.
Back-to-back vectors therefore leave the stage back to back. The input
valid `in_en` may have gaps; there is no backpressure.

Timing with gap-free input: the first output of a vector appears
**`N_DATA + 4` cycles** after its first input. One cycle each goes to the
final MAC update, the `α·ρ` product, the coefficient step and the
update-side product, plus the output register.

`ρ` is accumulated by a third MAC while the parameter pairs are written.
The pairs must therefore be written in ascending order starting at index 0,
and before any vector is streamed. An assertion flags a parameter write
while samples are in flight.

## 3. Number formats and rounding (`dbu_pkg`, `dbu_quant`)

| quantity                                   | format   | range        | LSB      |
|--------------------------------------------|----------|--------------|----------|
| reflection vectors `u_k`, phasors of `D`   | Q(12,10) | ±2           | 1/1024   |
| samples `x` between stages, in and out     | Q(10,6)  | ±8           | 1/64     |
| `α1`, `α2`, `ρ`, `c1`, `c2`, correction    | Q(12,6)  | ±32          | 1/64     |

`Q(a,b)` is an `a`-bit two's-complement number with `b` fraction bits. The
three formats are those of the published design. Inner-product sums and the
`α·ρ` product are kept at full precision (32–40 bits). Each is then reduced
once by a quantization unit: round to nearest, ties toward +∞, and clip to
the target range. Every clip raises `sat_evt` for one cycle. Inputs with
unit average power (QAM) are far from the Q(10,6) limits. A vector of
samples near ±8 saturates, and the design then still behaves
deterministically.

Precision measured on random unit-norm reflection vectors and 16QAM input
shows how the error grows with `K`. The table gives the largest error of
one output sample against the exact double-precision transform, and the
worst round-trip error of `U_dataᴴ U_data x`:

| K   | largest error (sample units) | round trip (LSB of Q(10,6)) |
|-----|------------------------------|-----------------------------|
| 4   | 0.027                        | 2                           |
| 32  | 0.063                        | 6                           |
| 128 | 0.146                        | 12                          |

## 4. The phase module (`dbu_phase_rot`)

`D` is diagonal, so it needs only one complex multiplier. Element `n` of
every vector is multiplied by the stored phasor `cos d_n + j sin d_n` in
Q(12,10), or by its conjugate in inverse mode. The result is rounded to
Q(10,6). The exponential is evaluated wherever the training happens; the
hardware stores only its result. Latency: 2 cycles.

## 5. The cascade and the receiver mode (`dbu_udata_transform`)

```
inverse = 0 :  in → HH_0 → HH_1 → … → HH_{K/2−1} → D   → out     (U_data)
inverse = 1 :  in → D^H  → HH_{K/2−1}' → … → HH_0'  → out     (U_dataᴴ)
```

Merged stage `s` holds `(u_{2s+1}, u_{2s+2})`. In transmitter mode the
reflections act in the order `u_1, u_2, …, u_K`, followed by `D`. Every
factor is its own inverse (`H_k` is Hermitian and unitary) or is inverted by
conjugation (`D`). The receiver therefore uses the same stages: `D^H` first,
then the stages in reverse order. Within each stage the two reflections are
swapped, which amounts to exchanging `α1` and `α2` and conjugating `ρ` (the
primes above). Multiplexers between the stages switch the order. `inverse`
must only change while the pipeline is empty.

Note on order: written as a matrix product, the transmitter computes
`D · H_K ⋯ H_1`. The formula in the introduction reads `D · H_1 ⋯ H_K`. The
two differ only in how the trained vectors are numbered. To use vectors
trained with the formula's numbering, load `u_K` into the position of
`u_1`, and so on.

Latency of the whole transform: `K/2 · (N_DATA + 4) + 2` cycles. That is
422 cycles at the defaults, or 2.11 µs at a 200 MHz sample clock. For
`K = 32` it is 3362 cycles (16.81 µs), and for `K = 128` it is 13442
cycles (67.21 µs). After the pipeline has filled, one sample leaves per
clock.

### Ports

| port        | dir | width              | meaning |
|-------------|-----|--------------------|---------|
| `clk`, `rst_n` | in | 1               | clock; asynchronous active-low reset of control state (parameter storage is not reset) |
| `inverse`   | in  | 1                  | 0: `U_data`, 1: `U_dataᴴ` |
| `cfg_we`    | in  | 1                  | parameter write strobe |
| `cfg_stage` | in  | `clog2(K/2+1)`     | `0…K/2−1`: merged stage, `K/2`: phase module |
| `cfg_addr`  | in  | `clog2(N_DATA)`    | element index `n` (ascending from 0 per stage) |
| `cfg_u1`, `cfg_u2` | in | 2×12 each    | stage: `u_{2s+1}[n]`, `u_{2s+2}[n]`; phase module: `cfg_u1 = e^{j d_n}` |
| `in_en`, `in_x`   | in  | 1, 2×10      | input valid, sample `{re, im}` in Q(10,6), element 0 of a vector first |
| `out_en`, `out_x` | out | 1, 2×10      | output valid, sample |
| `sat_evt`   | out | 1                  | some quantizer clipped a value |

Vectors are not marked: each stage counts `N_DATA` valid samples per vector
from reset. Loading parameters takes `(K/2 + 1) · N_DATA` write cycles.

### Smaller OFDM sizes

A smaller transform, such as 46 data subcarriers for a 64-point OFDM
symbol or 94 for 128, runs unchanged inside the 206-sample frame. Load
reflection vectors that are zero beyond the used length, and phasors equal
to 1 there. Then pad each vector with zeros. The padding comes out exactly
zero. Only the used fraction of the sample slots carries data. The
block-wise variant of the waveform, which mixes only within `B` groups of
subcarriers, can be expressed the same way: reflection vectors confined to
one group.

## 6. Files

| file | contents |
|------|----------|
| `rtl/dbu_pkg.sv` | formats and complex types |
| `rtl/dbu_quant.sv` | quantization unit (round, saturate) |
| `rtl/dbu_cmac.sv` | complex multiply-accumulate unit |
| `rtl/dbu_fifo.sv` | input FIFO (register array, first-word fall-through) |
| `rtl/dbu_param_ram.sv` | parameter storage, 1 write / 2 asynchronous read ports |
| `rtl/dbu_hh_merged.sv` | merged Householder stage with its data controller |
| `rtl/dbu_phase_rot.sv` | phase module `D` |
| `rtl/dbu_udata_transform.sv` | top: cascade, phase module, mode routing |
| `tb/dbu_ref_pkg.sv` | bit-exact integer models and ideal floating-point reference |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_dbu_workloads` |
| `tb/dbu_wl_runner.sv` | one parameterised workload run used by `tb_dbu_workloads` |

## 7. Verification

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog ends it with a failure if it hangs.

* `tb_dbu_quant`, `tb_dbu_cmac`, `tb_dbu_fifo`, `tb_dbu_param_ram` check the
  building blocks against models written from their definitions. This
  includes rounding ties, both saturation limits, the FIFO full with a
  simultaneous push and pop, and the dual read ports.
* `tb_dbu_hh_merged` (at `N_DATA = 206`) compares every output of one stage
  with a bit-exact integer model and with exact double-precision
  reflections. It also checks the `N_DATA + 4` latency, back-to-back
  throughput, input gaps, reverse mode and the round trip.
* `tb_dbu_phase_rot` does the same for `D` and `D^H`.
* `tb_dbu_udata_transform` runs the top at its default parameters. It
  checks transmitter mode with back-to-back and gapped vectors, a
  saturating vector, the switch to receiver mode, and the round trip
  `U_dataᴴ U_data x ≈ x`. It counts each of these mechanisms and fails if
  one never occurred.
* `tb_dbu_workloads` runs six cases: the three OFDM sizes (206 data
  subcarriers, and 46 and 94 zero-padded), 64QAM, and `K = 32` and
  `K = 128`.

Each testbench was also run against a deliberately broken copy of its
module, for example with a flipped sign of the `ρ` term, truncation instead
of rounding, or a receiver mode without the reversed order. Every such copy
fails.

To run one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -Itb -y rtl -y tb rtl/dbu_pkg.sv tb/dbu_ref_pkg.sv \
  tb/tb_dbu_udata_transform.sv --top-module tb_dbu_udata_transform \
  --Mdir obj -o sim && ./obj/sim
```

Replace the testbench name for the others. Every run takes well under a
second of simulation. The workload bench needs about half a minute to
compile (it elaborates 64 merged stages).

## 8. Where this RTL departs from, or adds to, the published design

Taken from the published design:

* the merged two-reflection formula;
* the stage made of input FIFO, parameter RAM, MAC and quantization units
  and a data controller, with input-valid and output-valid strobes;
* the cascade of `K/2` stages followed by an element-wise phase multiplier;
* receiver reuse by reversing the cascade;
* the three fixed-point formats;
* serial input at one sample per clock, and no block RAM.

This design's own choices, where the description is silent:

* **Latency.** The reported figures correspond to exactly `N_DATA` cycles
  per merged stage (2.06 µs for `K = 4` at 200 MS/s). This pipeline needs
  `N_DATA + 4` per stage plus 2 for `D`, about 2–3 % longer.
* **Where ρ comes from.** It is computed on chip while loading.
* **Interfaces.** The parameter port, the `inverse` mode input and the
  `sat_evt` flag.
* **Arithmetic details.** Rounding (nearest, ties up) with saturation, the
  accumulator widths, and the exact points where values are rounded to
  Q(12,6).
* **Buffering.** The 4-entry coefficient queue and 8 spare FIFO entries.
* **Sizes.** `N_DATA = 206` and `K = 4` as defaults. The FPGA results were
  reported for `K = 4, 32, 128`. Fewer reflections suffice for the
  communication and sensing gains; the PAPR results need `K = 128`, which
  is a parameter change.
* **Mode changes.** The mode may change only between vectors, with the
  pipeline empty.

Not part of this RTL: the training of the vectors, the rest of the OFDM
transmitter and receiver, the sensing estimator and the radio front end.
