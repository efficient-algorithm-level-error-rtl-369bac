# Error-detected NTT datapaths for lattice cryptography

The number-theoretic transform (NTT) carries most of the arithmetic in
lattice-based schemes such as Kyber. Injecting a fault into it is a known way to
attack those schemes. This RTL adds cheap, algorithm-level error detection to two
NTT-based datapaths.

The idea is **shifted-operand encoding**. The NTT is fed the encoded input
`x'(j) = alpha*x(j) + beta*x(j+s)` instead of `x`. Because the NTT is linear, and
a cyclic shift in the input is a multiplication by a fixed twiddle power in the
output, the encoded output is the ordinary output times a known scalar per
frequency. A scalar from a precomputed table strips the encoding off again. A
cheap identity on the decoded result, checked against sums of the input, then
tells whether the transform went wrong. The encoder costs one addition and one
shift per coefficient; `alpha = 2`, `beta = 1` makes it a doubling and an add.
The decoder costs one or two multiplications by stored constants.

The method follows "Efficient Algorithm Level Error Detection for
Number-Theoretic Transform used for Kyber Assessed on FPGAs and ARM". That work
evaluated its FPGA version through high-level synthesis and gives no
micro-architecture. The schedules, buffers, interfaces and timing here are this
design's own.

The top module `ntt_ed_top` holds two independent datapaths:

| datapath | module | field | what it computes | check |
|---|---|---|---|---|
| NWC multiplier | `nwc_ed_mult` | n = 256, q = 7681, omega = 3844, psi = 62 | `c = f*g mod (x^256 + 1)` by negative wrapped convolution | shifted recomputation of the pre-process; `h(0) = sum f~ * sum g~` |
| Kyber NTT | `kyber_ntt_ed` | n = 256, q = 3329, omega = 17 | Kyber round-3 forward NTT (two 128-point halves) | `sum of all 256 outputs = 128*(f(0)+f(1))` |

Each datapath has its own error flag. `err` is their OR.

## Arithmetic conventions

- All coefficients are 13 bits wide and always fully reduced (`0 <= x < q`).
- Products use a Barrett multiplier (`mod_mul`). It computes
  `m = floor(2^26/q)` and ends with two conditional subtractions. This is a
  different choice from the Montgomery arithmetic of the Kyber reference
  software. The values match those of the reference after its
  `fqmul`/Montgomery correction.
- Every constant table is computed at elaboration by constant functions in
  `ntt_pkg`. No data files are needed. These tables cover twiddles, decoder
  constants, `psi^i` and `n^-1 psi^-i`.
- `psi = 62` is not printed with the parameter table used. It is the square
  root of `omega = 3844` modulo 7681 with `psi^256 = -1`, as the negative
  wrapped convolution requires.

## The NTT core and the butterfly fault model

`ntt_core` is an in-place iterative Cooley–Tukey transform on a register-file
memory.

- **Schedule.** It performs one butterfly `c = a + b*w`, `d = a - b*w` per
  cycle. Input is in natural order and output in bit-reversed order.
- **Cyclic schedule** (`KYBER = 0`). Stage `s` has `2^s` blocks. Block `b`
  uses `w = omega^bitrev_{LOGN-1}(b)`, giving 1024 butterflies for n = 256.
- **Kyber schedule** (`KYBER = 1`, n = 128 per half). Twiddle counter `k`
  runs from 1 upwards and `w = 17^bitrev7(k)`, giving 448 butterflies per half.
- **Timing.** `start` to `done` takes the number of butterflies plus one
  cycle. `bf_count` shows the butterflies performed.

`butterfly` has three numbered points where a fault can be injected:
1 the multiplier, 2 the adder, 3 the subtractor. Every core takes a `fault_t`
request `{en, burst, index, pos, err}`. Butterfly number `index` gets `err`
added (mod q) at point `pos`. With `burst` set, every butterfly from `index`
on is faulty. The request is compared with `bf_count` on every cycle, so a
testbench can move it from one butterfly to the next during a run. This is
how several faults per transform are injected. Tie every fault input to zero
in normal use.

## NWC multiplier (`nwc_ed_mult`)

The multiplier runs five phases, one after the other:

1. **Pre-process with recomputation** (`preprocessor`, two of them).
   - `f~[i] = f[i]*psi^i` is computed by `LANES = 4` modular multipliers,
     four elements per cycle.
   - It is then computed again with both operand lists rotated by one
     position: `f[i+1]*psi^(i+1)` lands in slot `i`.
   - The second result is shifted back and compared with the first; a
     difference raises `err_pre`.
   - The rotation is the point of the scheme. Each element is computed by a
     different multiplier in the two steps, so a permanently faulty
     multiplier always shows up.
2. **Encoding** (`shift_encoder`, LAG 1).
   - `f~` is streamed once. The encoder forms `2 f~(j) + f~(j+1 mod n)` and
     writes it into an NTT core.
   - The wrap-around value uses the first sample, which is held until the end
     of the stream.
   - `nwc_checker` adds up `sum f~` and `sum g~` at the same time.
3. **Two encoded NTTs** run in lockstep (an assertion checks it).
   - Output position `p` holds `(2 + omega^-k)*F(k)`, where `k = bitrev(p)`
     and `F = NTT(f~)`.
4. **Component-wise multiplication and Decoder_2.**
   - `pointwise_mul` multiplies the two encoded transforms.
   - `decoder2` multiplies the result by the stored constant
     `1/(2 + omega^-k)^2`, giving `h(k) = F(k)*G(k)` on `h_valid/h_idx/h_data`.
   - `nwc_checker` compares `h(0)` with `sum f~ * sum g~`. This holds because
     `F(0)` is the plain sum of `f~`. A difference raises `err_ntt`.
5. **Inverse NTT and post-process** (`intt_postprocess`).
   - The inverse transform reuses `ntt_core` with `omega^-1`.
   - The scaling `n^-1` and the post-process `psi^-i` are merged into one
     table multiply on read-out.
   - The product coefficients appear on `out_valid/out_idx/out_data`.
   - This phase is not covered by the error detection, as in the original
     scheme, which protects the pre-process and the NTT multiplication.

### What the h(0) check can and cannot see

Only one output coefficient is checked. A fault is therefore detected only if
its effect reaches output position 0.

- In a Cooley–Tukey NTT, a butterfly in stage `s` feeds position 0 only if it
  belongs to block 0 of that stage. Even then, only its adder output (and the
  multiplier, which feeds both outputs) leads there.
- A subtractor fault in a first-stage butterfly reaches only the odd
  frequencies. It corrupts half of `h` and is never seen.
- For one random fault (three positions equally likely, uniform over all
  butterflies of both NTTs), the chance of detection follows from this
  structure: `2/3 * 1/8 * sum_{s=0..7} 2^-s ≈ 17 %`.
- More faults raise it quickly, because any one of them reaching position 0
  is enough.

The included campaign measures this directly (see *Verification*). The
published simulation of the scheme reports 53 % for one fault; this RTL does
not reach that figure, and the difference is listed below.

## Kyber NTT (`kyber_ntt_ed`)

The Kyber round-3 NTT is two independent 128-point transforms: one on the
even-indexed coefficients, one on the odd. Each is evaluated at
`zeta_k = 17^(2 bitrev7(k) + 1)`.

- **Encoding.** A `shift_encoder` with LAG 2 forms `2 f(i) + f(i+2 mod 256)`
  from the input stream. It accepts one coefficient per cycle (`in_valid`,
  `in_ready`). Within each half this is the shift by one that the encoding
  needs.
- **Transforms.** The encoded values go into two `ntt_core`s with the Kyber
  schedule, which run in parallel.
- **Decoding.** The encoding gives `Y(k) = (2 + 1/zeta_k)*F(k) - 2 f_ref/zeta_k`,
  where `f_ref` is `f(0)` for the even half and `f(1)` for the odd half. The
  extra term comes from the negacyclic wrap.
  - `decoder34` inverts this with two table multiplications and one addition:
    `F(k) = (Y(k) + f_ref*C1[k]) * C2[k]`, where `C1[k] = 2/zeta_k` and
    `C2[k] = 1/(2 + 1/zeta_k)`.
  - Decoder_3 serves the even half and Decoder_4 the odd half.
- **Check.** The sum over `k` of `zeta_k^j` is 128 for `j = 0` and 0
  otherwise. So the 128 even outputs add up to `128 f(0)` and the odd ones to
  `128 f(1)`. `kyber_checker` adds all 256 decoded outputs, two per cycle, and
  compares the total with `128*(f(0) + f(1))`.
- **Outputs.** They leave as pairs `NTT(f)(2k)`, `NTT(f)(2k+1)` on
  `out_valid/out_k/out_even/out_odd`. `bf_total` reports the 896 butterflies.

Every butterfly fault changes the outputs linearly. The check misses it only
when the weighted sum of the changes happens to be 0 mod q. The check is
therefore much stronger than the single-coefficient check of the NWC datapath.

## Interfaces and timing

**NWC multiplier:**
- Load `f` (`load_sel = 0`) and `g` (`load_sel = 1`) in natural order while
  idle, then pulse `start`.
- `h` and the product `c` leave one value per cycle in bit-reversed order,
  each with its natural index.
- `done` pulses one cycle after the last coefficient.
- `start` to `done` takes
  `2n/LANES + n + 1 + (n/2)log2(n) + n + 7 + (n/2)log2(n) + n + 2` cycles:
  **2960 cycles** at the defaults.
- The error flags are valid from the last `h` value until the next `start`.

**Kyber NTT:**
- Pulse `start`, then stream 256 coefficients.
- The 128 output pairs follow the two transforms.
- `start` to `done` takes `n + 7*64 + 135` cycles: **839 cycles**, including
  the input stream.
- `err` is valid with `done`.

**Both:**
- Reset is asynchronous and active low. Only control state is reset; memories
  are always written before they are read.
- Lint reports `SYNCASYNCNET`. The cause is that the assertions use `rst_n`
  in `disable iff` while the flops use it asynchronously; it is not a
  circuit problem.

For reference, the HLS design of the original work reported 3,703 cycles
(Zynq UltraScale+) and 3,749 cycles (Artix-7) at about 140 MHz. Those figures
are for a different micro-architecture, so the two are not comparable cycle
for cycle.

## Departures from the published scheme

- **Twiddle counter start.** The pseudo-code of the Kyber NTT starts its
  twiddle counter at `k = 0`. The transform equations it is meant to compute
  (and the Kyber reference code) need `k = 1`. The equations are followed.
- **Encoder scalars.** `alpha = 2`, `beta = 1` are the values drawn on the NWC
  block diagram. The Kyber scheme leaves them free; the same pair is used
  there. For both fields, `alpha + beta*omega^-k` is never zero, so every
  decoder constant exists.
- **Fault value.** A fault adds a nonzero value mod q. The original fault
  model gives no fault value.
- **Burst faults.** Two definitions appear in the description of the burst
  mode:
  - "all subsequent butterfly operations are faulty", which the `burst` bit
    implements;
  - "multiple consecutive bits are corrupted", which is not modelled.

  The campaign uses bursts of F consecutive butterflies.
- **Detection ratios.** The measured ratios differ from the published ones:
  - NWC NTT multiplication, one fault: about 11–17 % here against 53 %.
  - Kyber, one fault: about 100 % here against 74.9 %.
  - The pre-process check agrees: 100 % here against 99.7–100 %.

  The published numbers come from a separate software simulation whose fault
  values and accounting are not given. The RTL implements the checks exactly
  as described: `h(0)` for NWC, the 256-output sum for Kyber. The measured
  ratios are what those checks give under the fault model above.
- **Micro-architecture.** The FPGA area, power and frequency results come
  from an HLS micro-architecture that is not described, and are not
  reproduced.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. Expected values are
computed inside the testbenches, independently of the RTL: direct-summation
NTTs, schoolbook negacyclic products and the Kyber reference layer loop.

| testbench | covers |
|---|---|
| `tb_butterfly` | random butterflies; each fault position |
| `tb_ntt_core` | both schedules against direct summation; latency; faults |
| `tb_preprocessor` | `f*psi^i`; every faulty lane caught; latency |
| `tb_shift_encoder` | LAG 1 and 2, wrap-around, head samples |
| `tb_pointwise_mul`, `tb_decoder2`, `tb_decoder34` | products and decoder constants |
| `tb_nwc_checker`, `tb_kyber_checker` | identities hold; mismatches flagged |
| `tb_intt_postprocess` | inverse NTT and post-process |
| `tb_nwc_ed_mult` | full multiplier against the schoolbook product; each detection case; 2960-cycle latency |
| `tb_kyber_ntt_ed` | full Kyber NTT against the reference loop; faults; 839-cycle latency |
| `tb_ntt_ed_top` | both datapaths at default size, concurrently (see below) |
| `tb_fault_campaign` | detection-ratio campaign (see below) |

`tb_ntt_ed_top` counts each detection mechanism and fails if one never
occurs:
- clean runs;
- NTT fault caught by `h(0)`;
- first-stage subtractor fault escaping;
- pre-process fault caught;
- component-wise multiplication fault caught;
- Kyber single and burst faults caught;
- the combined flag.

`tb_fault_campaign` runs the fault model at default sizes:
- NWC NTT multiplication: 1/2/4/8/16 random faults, 80 samples each. The
  faults fall on the 2048 butterflies of the two forward NTTs and the 256
  component-wise multiplications;
- NWC pre-process: 1/2/4/8/16 transient faults in single multiplications,
  40 samples each, plus permanent multiplier faults. A transient fault is made
  by raising a pre-processor's multiplier fault input for one cycle only;
- Kyber: 1/2/4/8/16 faults and bursts of 2–6, 100 samples each.

It first checks that a component-wise fault at position 0 is caught and one
at position 5 corrupts `h` unseen. It then prints the detection ratios and
checks:
- no false alarm on the NTT check;
- every corrupted pre-process output is flagged;
- every permanent pre-process fault is caught;
- NWC escapes are present;
- detection does not fall as faults are added.

A fault that only hits the recomputation pass is flagged with the output
intact, as intended. Typical results:

| campaign | 1 | 2 | 4 | 8 | 16 faults |
|---|---|---|---|---|---|
| NWC pre-process, transient | 100 % | 100 % | 100 % | 100 % | 100 % |
| NWC NTT multiplication | 11–17 % | 18–21 % | 41–45 % | 61–70 % | 86–92 % |
| Kyber NTT, normal | 100 % | 100 % | 100 % | 100 % | 100 % |

Kyber bursts of 2 to 6 butterflies are detected in 99–100 % of runs. With only
40 to 100 samples per cell, these ratios carry a spread of several percent.

To simulate one testbench with plain Verilator (5.x), compile the package
first:

```
verilator --binary --timing --assert -Wno-fatal rtl/ntt_pkg.sv \
    $(ls rtl/*.sv | grep -v ntt_pkg) tb/tb_ntt_ed_top.sv --top-module tb_ntt_ed_top
./obj_dir/Vtb_ntt_ed_top
```

The full-size top testbench takes about ten seconds, and the campaign about
half a minute.

## Files

| file | content |
|---|---|
| `rtl/ntt_pkg.sv` | field parameters, `coef_t`, `fault_t`, modular helper functions |
| `rtl/mod_mul.sv` | Barrett modular multiplier |
| `rtl/butterfly.sv` | butterfly with fault points 1/2/3 |
| `rtl/ntt_core.sv` | iterative NTT, cyclic or Kyber schedule |
| `rtl/preprocessor.sv` | `x[i]*psi^i` with shifted recomputation check |
| `rtl/shift_encoder.sv` | `alpha*x(i) + beta*x(i+LAG)` encoder |
| `rtl/pointwise_mul.sv` | component-wise multiplier |
| `rtl/decoder2.sv` | NWC decoder `1/(alpha + beta*omega^-k)^2` |
| `rtl/nwc_checker.sv` | `h(0)` against `sum f~ * sum g~` |
| `rtl/decoder34.sv` | Kyber decoders for the even and odd halves |
| `rtl/kyber_checker.sv` | 256-output sum against `128*(f(0)+f(1))` |
| `rtl/intt_postprocess.sv` | inverse NTT with `n^-1 psi^-i` post-process |
| `rtl/nwc_ed_mult.sv` | NWC multiplier with its controller |
| `rtl/kyber_ntt_ed.sv` | Kyber NTT with its controller |
| `rtl/ntt_ed_top.sv` | top level |
| `tb/tb_*.sv` | one testbench per module, plus the end-to-end and campaign benches |
