# An RNS analog matrix-vector core with redundant-residue error correction

Analog matrix-vector multipliers (resistive crossbars, photonic meshes and the
like) are fast and efficient. Their accuracy, though, is limited by the data
converters at their edges. A dot product of two h-element vectors with
b-bit entries carries

    b_out = b_in + b_w + log2(h) - 1

bits of information. For b = 6 and h = 128 that is 18 bits. An ADC that wide
costs roughly 4x more energy for every extra bit. A narrower ADC keeps only the
most significant bits and throws the rest away after every tile.

This design avoids the loss with a **residue number system (RNS)**. Every
integer is carried as its remainders modulo a set of pairwise co-prime moduli
{m_1 ... m_n}. Addition and multiplication act on each remainder separately.
So a whole dot product can be computed in n independent analog units, one per
modulus. Each unit reduces its result modulo m_i in the analog domain. Its
output then fits in ceil(log2 m_i) bits, and an ADC of that width captures it
exactly. If the product M of the moduli exceeds the dot-product range, the
exact integer result is rebuilt digitally with the Chinese Remainder Theorem
(CRT).

The analog units are noisy, and one wrong residue ruins the rebuilt integer.
So the core adds **redundant moduli** and decodes by voting (a redundant RNS,
or RRNS). A single bad residue per element is corrected. Two bad residues are
normally detected, and the matrix-vector multiplication (MVM) is then repeated.

The RTL in `rtl/` covers the digital parts of that dataflow. The analog MVM
units are a behavioural model.

## Default configuration

| quantity | value |
|---|---|
| tile size h (`H`) | 128: one 128 x 128 weight tile, 128-element input vector |
| precision b (`B`) of inputs, weights, DACs, ADCs | 6 bits |
| non-redundant moduli (`K` = 4) | 63, 62, 61, 59; product M = 14,057,106 (about 2^23.7) |
| redundant moduli (`N` - `K` = 2) | 55, 53 |
| dot-product range | \|y\| <= 128 * 31 * 31 = 123,008 (18 bits) |
| correctable / detectable residue errors per element | 1 / 2 (most of the time, see below) |
| MVM attempts per input vector (`MAX_ATTEMPTS`) | 2 (0 = no limit) |

The four non-redundant moduli are the 6-bit set, which is the smallest
precision that keeps large networks (ResNet-50, BERT-large and the other MLPerf
datacenter models) within 1 % of FP32 accuracy. The redundant moduli 55 and 53
are a choice of this implementation. They are co-prime with the others and
below 64, so their residues also fit 6-bit converters. Every group of four of
the six moduli still covers the ±123,008 range, and voting needs that.

Other precisions are a parameter change. Set `B`, `K`, `N` and `MODULI`
(entry i is modulus i+1; unused entries are 0). `tb/tb_rns_configs.sv` runs
these sets end to end:

| B | non-redundant moduli | redundant moduli used in the test |
|---|---|---|
| 4 | 15, 14, 13, 11 | none: no 4-bit modulus is co-prime with this set |
| 5 | 31, 29, 28, 27 | 25 |
| 6 | 63, 62, 61, 59 | 55, 53, 47, 43 (four redundant) |
| 7 | 127, 126, 125 | 121, 113 |
| 8 | 255, 254, 253 | 251, 247 |

## Dataflow

```
 FP32 weights (row by row) --+
                             +--> scale_quantize --> forward_converter x N --> analog_mvm_unit x N
 FP32 input vector ----------+     (s = max|v|)       (x mod m_i)               (W x mod m_i, ADC)
                                        |                                             |
                                        | scale factors                               v
                                        v                                       residue_buffer
 FP32 result <-- activation <-- scale_back <-- rns_controller <-- rrns_voter <-------+
          (sigmoid/ReLU)        (Y*s_in*s_w/QMAX^2)  (retry)      (CRT of C(N,K) groups, vote)
```

1. **Scale and quantize** (`scale_quantize`). Each weight row and each input
   vector gets one FP32 scale factor, its largest magnitude. Every element v
   becomes `q = sign(v) * round(|v| / s * QMAX)` with `QMAX = 2^(B-1) - 1`.
   That is a symmetric integer in [-31, 31] for B = 6. The division is done on
   the mantissas with one integer divider. The unit buffers the vector because
   the maximum must be known before the first element is quantized. So one
   vector takes 2H clocks: H to load, H to emit. A single unit serves both
   weights and inputs.
2. **Forward conversion** (`forward_converter`, one per modulus). The
   residue of a signed integer uses Barrett reduction of the magnitude. A
   negative value with residue r != 0 then becomes m - r.
3. **Analog MVM** (`analog_mvm_unit`, one per modulus). The weight residues
   stay resident in the unit's weight DACs. The input residues are written
   into its input DACs. One `start` makes all units compute their H dot
   products modulo their own modulus in parallel.
4. **Residue buffer** (`residue_buffer`). This captures the N x H output
   residues when all units report done. It serves one element (N residues)
   per clock.
5. **Reverse conversion and voting** (`rrns_voter`, `crt_converter`). See the
   next section.
6. **Retry** (`rns_controller`). If any element could not be decoded, the
   whole MVM runs again on the same DAC contents. Only the unresolved elements
   take the new votes. After `MAX_ATTEMPTS` attempts, an element that is still
   unresolved leaves with `y_err` set.
   With `MAX_ATTEMPTS = 0` the MVM repeats until every element is resolved.
   That is the limit of unboundedly many attempts: it removes every
   detectable error that is transient, but it waits forever on one that
   persists.
7. **Scale back and activation** (`scale_back`, `activation`). Each result is
   `Y[k] = Y_SI[k] * s_in * s_w[k] / QMAX^2`, computed in FP32 with three
   multipliers in a pipeline. Then `activation` applies the sigmoid if
   `sigmoid_en` is set, otherwise ReLU if `relu_en` is set, otherwise nothing.
   The sigmoid works in fixed point:
   - |y| is rounded to 12 fraction bits;
   - the value is interpolated linearly between entries of a 257-point
     table of sigmoid(j/16) on [0, 16), which is computed at elaboration;
   - negative y uses sigmoid(-y) = 1 - sigmoid(y);
   - |y| >= 16 saturates.

   The absolute error is below 1e-4.

## Reverse conversion and voting

This is the least obvious part of the design.

**CRT.** For a group of k moduli with product M, let M_i = M / m_i and
T_i = M_i^-1 mod m_i. The integer is

    A = ( sum_i  a_i * (M_i T_i mod M) ) mod M .

The coefficients `M_i T_i mod M` are constants. They are computed at
elaboration by functions in `rns_pkg`, so each `crt_converter` is k constant
multipliers, an adder and one Barrett reduction modulo M. A result of
ceil(M/2) or more is read as negative (A - M). The signed range of a group is
therefore [-floor(M/2), ceil(M/2) - 1].

**Groups.** With N residues of which K are needed, there are G = C(N,K)
groups. The default has C(6,4) = 15. `rrns_voter` builds one CRT converter
per group, where group g is the g-th K-bit mask in increasing numeric order.
All groups decode the same element in the same clock.

**Vote.** Each group's value collects one vote from every group that produced
the same value. The first value with at least `VOTE_MIN` votes is accepted.

- If no residue is wrong, all G groups agree (`unanimous`).
- If t residues are wrong, the C(N-t, K) groups that avoid all of them still
  agree on the correct value. A group containing a wrong residue almost
  always gives a value of its own.
- So with up to t = floor((N-K)/2) errors, the correct value gets at least
  C(N-t, K) votes. That is the default `VOTE_MIN`: 5 of 15 for RRNS(6,4).
  Two different values cannot both reach it, because they would share at
  least K residues and so be equal.

The threshold is a real choice. A strict-majority rule ("more than half of
the groups agree") is the obvious alternative. It accepts only clean codewords
whenever N - K <= 2: with one bad residue out of six, only 5 of the 15 groups
are clean. The majority rule would then turn every single error into a retry
and never correct anything, so the default follows the code's correction
capability instead. `VOTE_MIN = G/2 + 1` gives the majority rule. The voter
testbench runs both.

**Limits.** Two wrong residues in RRNS(6,4) are at the code's minimum
distance. Now and then (about 8 % of random double errors in the voter test)
the received word lies one residue away from a different valid codeword. The
voter then accepts that wrong value and does not detect the error. No decoder
can avoid this for this code. More redundant moduli make it rarer.

**Timing.** There is one clock for the CRT of all groups and one for the vote,
so a result appears 2 clocks after its residues, at one element per clock.

## The analog unit model

`analog_mvm_unit` is a behavioural model, not synthesizable logic. It
follows the photonic form of analog modulo. Each product w*x becomes a phase
step of w*x*2π/m. The phases add along a row and wrap at 2π, and the ADC
reads the final phase with m levels. The model does this in `real`
arithmetic. Without noise it returns exactly (Σ w x) mod m, one clock after
`start`.

Noise is represented only by the `fault` input. It adds an offset (mod m) to
one output row, in the units selected by `unit_mask`, for every MVM started
while `fault.en` is high. A testbench can drive `fault.en` from the `attempt`
output to make an error transient (first attempt only) or persistent. A real
technology would replace this block. Its port list is the interface the
digital side expects:

- a weight residue write port (row, column, residue);
- an input residue write port (index, residue);
- `start`;
- `y_valid` with H residues.

## Top-level interface (`rns_accel_top`)

| port | dir | meaning |
|---|---|---|
| `w_valid/w_ready/w_data` | in | FP32 weights, H*H elements, row by row (row k yields output k) |
| `x_valid/x_ready/x_data` | in | FP32 input vector, H elements |
| `relu_en` | in | apply ReLU to the outputs of the current vector |
| `sigmoid_en` | in | apply the sigmoid instead (has priority over `relu_en`) |
| `fault` | in | error injection into the analog models (`rns_pkg::analog_fault_t`) |
| `y_valid/y_idx/y_data` | out | FP32 results, one per clock in index order, no back-pressure |
| `y_err` | out | element not decodable after the last attempt (data meaningless) |
| `y_corrected` | out | element accepted although not all groups agreed |
| `y_clamped` | out | element set to zero by ReLU |
| `busy`, `attempt`, `retry` | out | sequencer active; current attempt (0-based); pulse when an MVM is repeated |

Both activation selects are sampled as each result passes through the
activation stage. Hold them steady until the last `y_valid` of the vector.

Reset is asynchronous and active low (`rst_n`). Both input streams use
ready/valid. A new weight matrix is taken only while the core is idle, and
weights have priority over inputs. Loading the matrix takes 2H clocks per
row, 2H^2 in all.

One input vector takes about:

- 2H clocks to quantize;
- 3 clocks per MVM attempt;
- H + 4 clocks per voting pass;
- H clocks of output, plus a 4-clock pipeline tail.

That is about 530 clocks at H = 128 without a retry. The sequencing is not
overlapped. While a vector is voted on, the next one is not yet being
quantized.

## Where this RTL departs from, or adds to, the dataflow it implements

- **Rescaling.** The output is Y_SI * s_in * s_w[k]. It is also divided by
  QMAX², because the quantizer multiplied both operands by QMAX. Without that
  factor the scale would be off by 961.
- **Quantization range.** Integers are symmetric, [-QMAX, QMAX].
  Ties round away from zero. FP32 denormals count as zero. Inf and NaN are not
  handled.
- **Vote threshold.** It is C(N - t, K) rather than a strict majority; see
  above.
- **Redundant moduli values, number of attempts, retry granularity.** These
  are this design's choices: whole-MVM repeat, only unresolved elements
  updated, at most `MAX_ATTEMPTS` attempts or, with 0, no limit.
- **Activation.** ReLU, sigmoid and identity are provided. The sigmoid
  method (table plus interpolation, error below 1e-4) is this design's
  choice. Other non-linear functions are not included.
- **Not included.** Tiling of layers larger than H, accumulation of partial
  outputs across tiles, and the memory that holds them are all left to the
  host. The core handles one H x H tile per weight load.
- **Arithmetic units.** The FP32 multiplier (`fp32_mul`) and the integer
  converter (`int_to_fp32`) round to nearest-even but flush denormals and do
  not produce NaN.
- **Clock and interfaces.** All widths of control signals, the ready/valid
  protocol, the pipeline depths and the clocking are this design's choices.

## Files

`rtl/`:

- `rns_pkg.sv`: types, default moduli, elaboration-time math (CRT
  coefficients, modular inverse, group enumeration, binomial, 1/n in FP32).
- `barrett_reduce.sv`, `forward_converter.sv`, `crt_converter.sv`,
  `rrns_voter.sv`: the residue arithmetic.
- `scale_quantize.sv`, `scale_back.sv`, `fp32_mul.sv`, `int_to_fp32.sv`,
  `activation.sv`: the FP32 boundary.
- `analog_mvm_unit.sv` (behavioural), `residue_buffer.sv`,
  `rns_controller.sv`, `rns_accel_top.sv`.

`tb/`: each block has a self-checking `tb_<block>.sv`. In addition:

- `tb_rns_accel_top.sv` runs the core end to end at H = 16 with 12 vectors.
  It covers clean vectors, a corrected single error, a detected double error
  repaired by the retry, a persistent double error that ends flagged, random
  single errors, and ReLU, sigmoid and identity. It counts each mechanism.
- `tb_rns_accel_full.sv` is the same test at the default size (H = 128,
  6 moduli) for 5 vectors.
- `tb_rns_workload.sv` runs a small two-layer classifier at the default
  size. Layer 1 has 64 inputs, 128 hidden units and ReLU. Layer 2 has
  10 outputs and 118 zero weight rows. A batch of four inputs goes through,
  with layer 1's FP32 outputs fed into layer 2 and a residue error injected
  in layer 2. The results are compared with the exact model and with
  unquantized double-precision arithmetic.
- `tb_rrns_noise.sv` decodes random values with random residue errors
  (probability 0.05 per residue) for 1, 2 and 4 redundant moduli, with one
  and with two attempts. It prints the output error rates. It checks that
  more redundant moduli and a second attempt both lower the rate, and that
  up to floor((N-K)/2) errors are always corrected. A typical run gives
  0.23 / 0.054, 0.039 / 0.005 and 0.005 / 0.000.
- `tb_rns_configs.sv` (with `tb_rns_config_env.sv`) covers the 4-, 5-, 7- and
  8-bit moduli sets and the 6-bit set with 4 redundant moduli. It also runs the default moduli with no attempt limit, against a double error that lasts three attempts.
- `tb_fp_pkg.sv` holds the reference helpers: FP32 conversion through
  `$realtobits`, quantization, positive modulo.

The references in the testbenches are written independently of the RTL.
They quantize in double precision, form the true integer dot products and
decode by brute-force CRT over every K-subset. Every testbench ends with a
`TB_RESULT checks=<n> failures=<n>` line.

## Simulating

With Verilator 5 (add `-y tb` for the testbenches):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/rns_pkg.sv tb/tb_fp_pkg.sv tb/tb_rns_accel_top.sv \
    --top-module tb_rns_accel_top --Mdir obj
./obj/Vtb_rns_accel_top
```

Replace the testbench name to run any other. The full-size test runs in a few
seconds, and the six-configuration test in a little over a minute. The design also
elaborates in the slang front end of Yosys. Logic synthesis applies to every
module except `analog_mvm_unit`, which uses `real` arithmetic, and the top
level that contains it.
