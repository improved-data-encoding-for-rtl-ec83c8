# Counter-based Van der Corput encoders for stochastic and hyperdimensional computing

Stochastic computing (SC) and hyperdimensional computing (HDC) both work on long
strings of bits instead of binary numbers. In SC a value is the fraction of ones
in a bit-stream. In HDC a symbol or an image is a hypervector (HV) of thousands
of bits. Both need a random source to make those strings, and the quality of
that source sets the accuracy. A pseudo-random generator (an LFSR) fills the
space unevenly and gives streams that are only roughly independent. The usual
fix is to run longer or to run several times.

This design replaces the random source with a **low-discrepancy sequence that
costs only a counter**. A Van der Corput (VDC) sequence in base B lists the
integers 0, 1, 2, ... with their base-B digits written in reverse order after a
radix point. For a base B = 2^k each digit is a group of k counter bits, so the
reversal is just a fixed wiring of the counter's flip-flops. One counter can be
wired several ways at once and so gives several different sequences. In this
README "VDC-2^k" means the sequence of base 2^k. The RTL uses this source in
three engines:

* `sc_sin`: an SC unit for sin(x), a 7th-order polynomial built from AND and NAND gates;
* `sc_div`: an SC divider whose correlation controller is a down counter;
* `uhd_classifier`: an HDC image classifier. It makes every position HV from
  **one** shared VDC-2 sequence. It makes the level (intensity) HVs with no
  randomness at all, from a counter and a comparator.

`vdc_encoding_top` puts the three engines side by side. They share the clock
and reset and nothing else.

## 1. The sequence source (`vdc2n_gen`)

A W-bit binary counter (drawn as T flip-flops, Tff0 toggling every clock) is
split into base-2^k digits, least significant first. Sequence value = the
digits in reverse order, each digit keeping its own bit order:

| k | name     | 8-bit wiring (value bits 7..0)       | first values (8-bit)     |
|---|----------|--------------------------------------|--------------------------|
| 1 | VDC-2    | cnt[0], cnt[1], ..., cnt[7]          | 0, 128, 64, 192, 32, ... |
| 4 | VDC-16   | cnt[3:0], cnt[7:4]                   | 0, 16, 32, ..., 240, 1, 17, ... |
| 8 | VDC-256  | cnt[7:0] (the counter itself)        | 0, 1, 2, 3, ...          |

Every wiring is a permutation. So over one period of 2^W clocks each value
appears exactly once, and a comparator `value > seq` gives a stream with exactly
`value` ones. This is why the SC results here have no random error, only
rounding and correlation error. When W is not a multiple of k (for example
VDC-128 on a 10-bit counter), the short top digit is placed in the least
significant bits. That keeps the wiring a permutation. It is this design's
choice and differs slightly from a truncated textbook VDC value.

Parameters: `W`, `NSEQ`, and `LOG2B[NSEQ]` (the k of each output). `en`
advances the counter, `clr` restarts it, and all outputs change on the clock
edge.

`sc_comparator` is the stream generator (`bit = value > rnd`).

## 2. Stochastic sin(x) (`sc_sin`)

The unit uses the Maclaurin series in Horner form:

    sin x ~ x - x^3/3! + x^5/5! - x^7/7! = x (1 - x^2/6 (1 - x^2/20 (1 - x^2/42)))

```
X      = x > VDC-4(t)                       input stream
x2     = X(t) AND X(t-2)                    x^2 (the 2-clock delay decorrelates)
s1     = NAND(x2, C42)                      1 - x^2/42
s2     = NAND(x2, C20, s1)                  1 - x^2/20 * s1
s3     = NAND(x2, C6,  s2)                  1 - x^2/6  * s2
Y      = X(t-2) AND s3                      sin x
C42/C20/C6 = 24/51/171 > VDC-128/256/512(t)  (round(1024/42), round(1024/20), round(1024/6))
```

All five streams come from one 10-bit counter. The only memory in the datapath
is the 2-flip-flop delay. The input uses VDC-4 and each coefficient a different
high base. This keeps the factors of every gate close to uncorrelated, so each
gate multiplies correctly. The base-to-coefficient mapping (128→1/42,
256→1/20, 512→1/6) follows the order in which the bases are listed for this
design. The source does not tie them one to one.

Timing: `start` while idle, then 1024 clocks of `y_bit`/`y_valid`, then a
one-clock `done` pulse 1025 clocks after the start clock. `y_count` holds the
ones count (≈ 1024·sin x). `x` must stay steady during the run.

Measured over all 1024 inputs: **MSE 0.513·10⁻⁴**, maximum error 0.021. The
published figure for this design at N = 1024 is 0.523·10⁻⁴.

## 3. Stochastic division (`sc_div`)

```
Y  = y > VDC-2(t)
X  = Y AND NOT zero          down counter loaded with x, counts down when Y = 1
Q  = Y ? X : Q(t-1)          2:1 mux and a D flip-flop
```

X is made of the first x ones of Y, so X is maximally correlated with Y and has
value x/2^8. When Y = 1 the output copies X. Otherwise it repeats its last bit.
Y's ones are spread evenly, so the counter runs empty after about (x/y)·256
clocks, and Q's value is x/y for x ≤ y. Stream length (8 bits) and the base
(VDC-2) are this design's choice.

Timing is like `sc_sin`: 256 bits, then `done`; `q_count` ≈ 256·x/y.

Measured over 1275 divisions, covering every divisor 1..255: mean absolute
error 0.49%. The worst case is about 17% and occurs for very small divisors.
The published mean/max error of this divider is 0.32%/6.24%, but on an
evaluation set that is not known here.

## 4. Unary HDC classifier (`uhd_classifier`)

This is the largest part. It maps an image of `N_POS` 8-bit pixels (784 =
28×28 by default) to a `D`-bit HV (1024 by default):

    H(t) = sign( Σ_i  P'_i(t) ⊗ L'_{pixel_i}(t) ),   t = 0 .. D-1

It then either adds H to a class, or finds the class nearest to H.

### 4.1 Position HVs from one source (`pos_hv_gen`)

Classical HDC stores a random HV for every pixel position. Here all positions
share one VDC-2 sequence V(t). Position i has a seed S_i (0 ≤ S_i < D) and one
T flip-flop Q_i:

    c        = V(t) >= S_i
    P'_i(t)  = c XOR Q_i
    Q_i     <= Q_i XOR c          (c drives the T input)

P'_i is the running parity of the comparator stream. Different seeds give
different, nearly orthogonal HVs, all from the one counter. At D = 256 the HV
of seed 120 has exactly 128 ones. In total 144 of the first 160 seeds give
exactly D/2 ones, and the others stay close to it.

Seed S_i = i mod D is this design's choice, and so is the sense `>=` of the
comparator. With D ≥ N_POS every position has its own HV. With more positions
than dimensions, positions i and i + D share one HV (their level HVs still
differ). The flip-flops start at 0
for every image.

### 4.2 Level HVs without randomness (`level_hv_gen`)

A W-bit up-counter (W = log2 D) runs through the dimensions. The pixel value is
shifted left by C = log2 D − 8, which scales 0..255 to 0..D−4:

    L'(t) = t < (pixel << C)

The level HV of value p is p·D/256 ones followed by zeros. Values 75 and 76
differ in exactly 2^C = 4 bits, so the correlation between levels falls
linearly with their distance, which is what level HVs are for.

### 4.3 Encoder (`hdc_encoder`)

Binding is the bipolar product (bit 1 = +1, bit 0 = −1, i.e. XNOR). Bundling is
a signed sum over the N_POS positions of one dimension. The HV bit is 1 when the
sum is positive; a zero sum gives 0.

### 4.4 Schedule and pipeline

The design walks **dimensions in the outer loop and positions in the inner
loop**, one position per clock. The HV generators therefore need one comparator
each, shared by all positions. Only the T flip-flops (one bit per position) hold
state across dimensions. The encoder needs a single accumulator, not D of them.

```
clock n     : read pixel i from pixel_buffer (registered read)
clock n+1   : P'_i(t), L'_i(t), accumulate;  on the last i advance both counters
clock n+2   : H(t) valid (hv_valid, hv_bit, hv_dim) -> assoc_memory
```

One image takes **D·N_POS + 2 clocks** from the start clock to `done`, which is
802,818 clocks at the defaults. The image HV is streamed out bit by bit
(`hv_valid`, `hv_bit`, `hv_dim`) for external use.

### 4.5 Associative memory (`assoc_memory`)

The memory holds one signed counter per dimension and class (D × N_CLASS ×
16 bits, as a D-deep memory). The class HV is the sign of those counters.

* **Training**: add ±1 per bit of H to the row of the label, saturating.
* **Inference**: for every class at once, count the dimensions where H agrees
  with the class HV. After the last bit, the class with most agreements wins
  (ties go to the lower index). For ±1 vectors cosine similarity is
  (2·agreements − D)/D, so the ranking equals cosine similarity.
* **Retraining**: a training pass with `unlearn` set also subtracts H (±1
  per bit, saturating) from the counters of class `wrong`. A retraining epoch
  is run by the host. It queries each training image and, when the answer
  `res_class` is not the label, trains the image again with `unlearn = 1` and
  `wrong = res_class`. The image moves towards its own class and away from the
  one that captured it. The source mentions only an epoch-based training
  option. This rule is the common perceptron-style one and is this design's
  choice.
* `am_clr` zeroes the memory in D clocks (`am_busy`).

There is one read-modify-write per clock, using an asynchronous read of row
`hv_dim`.

### 4.6 Using it

1. Pulse `am_clr` and wait for `am_busy` to fall.
2. Write the pixels (`pix_we`, `pix_addr`, `pix_data`) while idle. Writes
   during a run are ignored.
3. Pulse `start` with `train`/`label` (and, for a retraining pass,
   `unlearn`/`wrong`). A start while busy or while the memory clears is
   ignored.
4. Wait for `done`. In inference, `res_valid`/`res_class`/`res_score` follow
   one clock later.

## 5. Where this RTL departs from its source, and what it leaves out

This RTL follows its source in:

* the counter-and-wiring sequence source;
* the sin(x) gate network with its single 2-clock delay and sequence bases;
* the divider structure;
* the position-HV circuit (comparator, T flip-flop, XOR);
* the level-HV circuit (counter, left shift by log2 D − 8, comparator);
* binding/bundling/sign, and the class memory.

Its own choices, where the source is silent:

* comparator senses, coefficient rounding, the base-to-coefficient mapping;
* the short-top-digit wiring;
* divider length and base;
* position seeds S_i = i;
* the dimension-serial schedule and every handshake;
* counter widths, saturation, tie rules, resets;
* agreement counting in place of a cosine unit;
* the retraining update rule (add to the label, subtract from the wrongly
  picked class).

Not built:

* the Sobol-sequence HDC encoders (the source gives no Sobol generator);
* the "UnaryHD" variant with popcount and masking logic (only named);
* the LFSR baselines.

Sizes: D = 1024, 784 positions and 10 classes are the defaults. They cover
MNIST-sized grey images. RGB inputs such as DermaMNIST (2352 features, 7
classes) or CIFAR-10 (3072 features) need `N_POS` and `N_CLASS` raised, and
D = 2K/8K needs `D` raised. All are parameters.

## 6. Verification

Every module has a self-checking testbench in `tb/` that compares it against
an independent software model written in the testbench. Each ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog.

* `tb_vdc2n_gen`: arithmetic digit reversal, permutation property, VDC-16 wiring, hold/clear.
* `tb_sc_sin`: all 1024 inputs against a bit-level model and `$sin` (MSE bound), latency.
* `tb_sc_div`: 1275 divisions against a bit-level model and x/y, latency, controller-empty and hold paths exercised.
* `tb_pos_hv_gen`, `tb_level_hv_gen`, `tb_hdc_encoder`, `tb_pixel_buffer`, `tb_assoc_memory`: bit-exact models, edge cases (ties, saturation, seed 120, retraining updates against the model).
* `tb_uhd_classifier`: reduced size (D = 256, 16 positions, 3 classes), every HV bit, latency, ignored disturbances, classification, and a retraining epoch on random images under assigned labels.
* `tb_sin_lengths`: the sin(x) unit at 512- and 256-bit streams (MSE 0.509·10⁻⁴ and 0.583·10⁻⁴; published 0.582·10⁻⁴ and 0.576·10⁻⁴).
* `tb_uhd_derma`: the classifier in a DermaMNIST-sized configuration (2352 features, 7 classes, D = 1024). It trains one synthetic prototype per class and classifies three noisy queries, with every HV bit checked. A second epoch then retrains any training image that is misclassified.
* `tb_vdc_encoding_top`: the whole design at its **default sizes**. Ten synthetic class prototypes are trained and four noisy queries are classified. Every HV bit and every result is checked against the model, while the SC engines run thousands of conversions alongside. It counts each mechanism (sin, division, empty controller, hold path, clear, train, infer, retrain, both extreme levels) and fails if one never occurs. It runs in well under a minute.

The images are synthetic (bars plus random grey pixels). No dataset accuracy is
claimed for this RTL.

## 7. Simulating

With Verilator 5, from the folder holding `rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal -y rtl --top-module tb_vdc_encoding_top tb/tb_vdc_encoding_top.sv
./obj_dir/Vtb_vdc_encoding_top
```

Replace the name with any other testbench. `-y rtl` lets Verilator find each
module in `rtl/<name>.sv`. Every module has its parameters as typed
`parameter`s with the defaults above, so a different configuration is an
override at instantiation, e.g.
`uhd_classifier #(.D(2048), .N_POS(2352), .N_CLASS(7))`.

Files: `rtl/` holds one module per file (`vdc2n_gen`, `sc_comparator`,
`sc_sin`, `sc_div`, `pos_hv_gen`, `level_hv_gen`, `hdc_encoder`,
`pixel_buffer`, `assoc_memory`, `uhd_classifier`, `vdc_encoding_top`). `tb/`
holds one testbench per module plus the workload tests.
