# tubGEMM in SystemVerilog: a temporal-unary / binary matrix multiply unit

tubGEMM computes **Y = A × B + C** on small signed integers (2 to 8 bits)
without any multipliers. One operand of every product, the element of A, is
sent to the processing elements (PEs) as a *temporal-unary* pulse: a run of
consecutive high cycles whose length encodes the value. The other operand, the
element of B, stays in binary. Each PE is only an adder, a multiplexer and an
accumulator. While the pulse is high, the PE adds b into its accumulator once
per cycle. A product a·b therefore takes about |a| cycles instead of one cycle
of a large multiplier.

Two ideas keep this practical:

* **Twos-unary encoding.** Each unary cycle is worth 2, not 1: the PE adds
  `b << 1`. An odd |a| gets one extra *odd-correction* cycle in which the PE
  adds `b`. For 8-bit signed data the longest product drops from 128 cycles
  to 64.
* **Latency follows the data.** All products of one step run in parallel, and
  the step ends as soon as its largest |a| has been counted out. Zeros
  (word sparsity) and small values (bit sparsity), which are common in
  quantized neural networks, therefore shorten the computation directly. The
  result is always exact; there is no stochastic approximation.

The default configuration is a 128 × 128 PE array that multiplies 128 × 128
matrices of 8-bit two's complement integers.

## Dataflow: N outer-product steps

A is M × N, B is N × P, C and Y are M × P. The PE array is M × P, and PE (i, j)
owns Y[i][j]. The GEMM runs as N *steps*. Step k takes column k of A and row k
of B and adds their outer product into the array:

```
                        row k of B (magnitude, sign)
                        |        |        |
  column k of A  --> [enc] -> PE(0,0)  PE(0,1)  PE(0,2) ...
  (one lane per row) [enc] -> PE(1,0)  PE(1,1)  PE(1,2) ...
                       ...
```

Lane i of the encoder drives all PEs of row i (`unary_a`, `a_is_odd`,
`a_is_neg`). Element j of the B row drives all PEs of column j (`b_mag`,
`b_is_neg`). Nothing moves between PEs; this is a broadcast array, not a
systolic one. C is loaded into the accumulators when the GEMM starts, so after
the N steps each accumulator holds C[i][j] + Σ_k A[i][k]·B[k][j].

## Blocks

| Module | Role |
|---|---|
| `tubgemm` | Top. Wires the blocks below together. |
| `index_counter` | Step index 0..N. Advances on `done` and raises `out_valid` at N. Also sequences start, the load cycle of each step and the encoder enable. |
| `vector_generator` (two instances) | Selects column k of A (the A-side instance is given A transposed) or row k of B. Registers it in sign-magnitude form. |
| `tu_encoder` | Twos-unary encoder: one count-by-2 counter and M comparators. Produces `unary_a`, `a_is_odd`, `a_is_neg` and `done`. |
| `pe_array` | The M × P grid of `tub_pe`. |
| `tub_pe` | Temporal-unary × binary multiply-accumulate element. |
| `tub_pkg` | Default sizes, the accumulator width and latency helper functions. |

## The encoder and the PE: what happens within one step

The encoder counter runs 0, 2, 4, … while the step is active. For a lane with
magnitude m:

* `unary_a` is high while `(count + 1) < m`. That holds for floor(m/2)
  cycles, each worth 2·b in the PE.
* `a_is_odd` is high in the one cycle where `(count + 1) == m`. This is the
  cycle straight after the pulse, and it happens only if m is odd. In it the
  PE adds b.
* `done` is high in the first cycle in which no lane is active. The counter
  then returns to 0.

Example: one column holds magnitudes 5, 2 and 0. `U` marks a unary cycle, `O`
the odd-correction cycle and `D` the done cycle:

```
cycle of step   L   0   1   2   3
count           0   0   2   4   6
lane m=5        .   U   U   O   .     2b + 2b + b = 5b
lane m=2        .   U   .   .   .     2b
lane m=0        .   .   .   .   .     0
done            .   .   .   .   D
(L = load cycle: the vector generators capture column k, encoder off)
```

Each PE does the following on every enabled clock edge
(`en = unary_a | a_is_odd`):

```
operand = a_is_odd ? b_mag : (b_mag << 1)
acc     = (a_is_neg ^ b_is_neg) ? acc - operand : acc + operand
```

Signs never enter the arithmetic as two's complement. Both operands travel as
magnitude plus sign bit, and the XOR of the two signs selects add or subtract.
The magnitude of the most negative value, −2^(BW−1), is 2^(BW−1), which still
fits in BW unsigned bits. With `BIPOLAR = 0` the unit is unipolar: elements
are unsigned and the sign bits are 0.

## Timing

A step whose largest magnitude is m takes

    1 (load) + floor(m/2) + (m mod 2) + 1 (done)   cycles.

Count the GEMM from the cycle in which `start` is sampled to the first cycle
with `out_valid` high, both included. It takes Σ_k step(m_k) + 2 cycles. For
bipolar BW-bit data the worst case is N·(2^(BW−2) + 2) + 2. At 400 MHz:

| Configuration | Worst-case cycles | At 400 MHz | Published latency |
|---|---|---|---|
| 16×16, 8-bit bipolar | 1058 | 2.645 µs | 2.65 µs |
| 32×32, 8-bit | 2114 | 5.285 µs | 5.30 µs |
| 64×64, 8-bit | 4226 | 10.565 µs | 10.60 µs |
| 128×128, 8-bit | 8450 | 21.125 µs | 21.20 µs |
| 16×16, 4-bit | 98 | 0.245 µs | 0.25 µs |
| 16×16, 2-bit | 50 | 0.125 µs | 0.13 µs |
| 16×16, 8-bit unipolar | 2082 | 5.205 µs | 5.29 µs |
| 16×16, 8-bit unipolar, every column max 82 | 690 | 1.725 µs | 1.72 µs (MobileNetv2 average case) |

The bipolar rows match the published figures to within their rounding; the
N·(2^(BW−2)+2)+2 formula also appears with the original design. The unipolar
worst case comes out 1.6 % shorter than published. Possibly the original spent
a little more overhead per step there; this cannot be checked. The last row
uses the expected maximum per feature map (82) that was measured on quantized
MobileNetv2 and reproduces the published average-case latency.

## Interface of `tubgemm`

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `start` | in | 1 | sampled while `busy` is low: load C, begin a GEMM. Ignored while busy. |
| `a[M][N]` | in | BW | matrix A (two's complement when `BIPOLAR`) |
| `b[N][P]` | in | BW | matrix B |
| `c[M][P]` | in | ACC_W, signed | bias C |
| `y[M][P]` | out | ACC_W, signed | accumulators; equal to A×B + C while `out_valid` |
| `busy` | out | 1 | a GEMM is running |
| `out_valid` | out | 1 | the step index has reached N; stays high until the next start |

A, B and C must be held stable from `start` until `out_valid`. The unit does
not include the memories that would hold them.

Parameters: `M`, `N`, `P` (default 128), `BW` (default 8), `BIPOLAR`
(default 1), and `ACC_W` (default 2·BW + clog2(N) + 1 = 24, so no dot product
can overflow).

## What follows the original design and what is this implementation's own

These parts follow the original design:

* the block structure and the signal names `index`, `done`, `out_valid`,
  `unary_a`, `a_is_odd`, `a_is_neg` and `b_is_neg`;
* the index counter counting 0..N on `done`;
* the count-by-2 counter with one comparator per lane;
* floor(m/2) unary cycles plus the odd correction;
* the PE's b / 2b multiplexer under `a_is_odd`, its XOR-selected add/subtract,
  and its OR-ed enable;
* initialising the PEs with C.

These are this implementation's own choices:

* **Comparator.** The published description says the comparator is high
  "while the value is greater than the counter" and also that it is high for
  floor(m/2) cycles. Those two statements disagree for odd m. The RTL
  implements floor(m/2) with `(count + 1) < m`, the only reading under which
  the odd correction gives an exact product.
* **Odd-correction cycle.** It is placed in the cycle after the unary pulse,
  never overlapping it.
* **Start and sequencing.** The `start`/`busy` handshake and the load cycle
  at the start of each step are this design's own. The registered vector
  generators and the sign-magnitude split in the vector generator also belong
  to this choice. The sequencing was chosen so that the cycle count equals the
  published worst-case latency.
* **Widths and reset.** The accumulator width, the width of C, and the
  synchronous reset are not specified by the original design.

Not included: the on-chip memory or buffers that hold A, B, C and Y. The
original work treats these as outside the unit. Area, power and energy figures
come from a commercial 5 nm flow and cannot be reproduced here.

## Verification

Each module has a self-checking testbench in `tb/`. Every testbench ends by
printing `TB_RESULT checks=<n> failures=<n>`.

| Testbench | What it checks |
|---|---|
| `tb_index_counter` | Cycle-exact comparison with a reference model, under random start and done pulses. This includes done during load cycles and start while busy. |
| `tb_vector_generator` | Sign-magnitude output, including 0x80 and 0xFF, for bipolar and unipolar instances. Checks that outputs hold between loads. |
| `tb_tu_encoder` | The waveform of every lane, cycle by cycle, against floor(m/2), m mod 2 and the done cycle, with the extreme values included. |
| `tb_tub_pe` | Accumulated signed products, including −128·−128, against integer arithmetic, plus the number of enabled cycles per product. |
| `tb_pe_array` | Row and column broadcast, checked as outer products accumulated over 12 steps. |
| `tb_tubgemm` | End to end on small bipolar (4×5×3, 8-bit) and unipolar (3×4×2, 4-bit) units. Checks Y and the exact cycle count of every GEMM. Counts each mechanism: odd corrections, subtracting PEs, all-zero steps, worst-case steps, starts ignored while busy, bias C and unipolar mode. Fails if any of them never happened. |
| `tb_tubgemm_workloads` | The configurations of the timing table above: 16x16 at 8, 4 and 2 bits, the worst-case latency of N = 32, 64 and 128, unipolar, and the MobileNetv2 average case. Checks results, cycle counts and the latency at 400 MHz. Latency depends only on N and on the column maxima of A, so the N = 32/64/128 runs use an 8 x N x 8 unit. The helper module `gemm_runner` runs one GEMM on one unit. |

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/tub_pkg.sv tb/tb_tubgemm.sv --top-module tb_tubgemm -o sim
./obj_dir/sim
```

The default size was also simulated once: a 128x128 array multiplying
128x128 matrices of 8-bit integers, running one worst-case GEMM. All 16384
results were correct and the latency was 8450 cycles. That test is not part
of `tb/`. Verilator's C++ build for 16384 PE instances took about 12 minutes
with four compile jobs, while the simulation itself took under a second. To
repeat it, instantiate `gemm_runner #(.M(128), .N(128), .P(128))` in a small
top, as `tb_tubgemm_workloads` does for smaller shapes.

The RTL uses concurrent assertions
for its internal rules: the index stays in range, load only happens while
busy, and no lane is ever in a unary cycle and an odd cycle at once. Build
with `--assert` to check them.

## Changing the design

* **Array size and precision.** Set the `tubgemm` parameters. The latency
  helpers in `tub_pkg` follow the parameters.
* **Streaming data in from memory.** The matrices are ports read by the two
  `vector_generator` instances, one vector per step, in the load cycle of that
  step. A memory-backed version would replace the multiplexer in
  `vector_generator` with a read port addressed by `index` and keep the same
  one-cycle load.
