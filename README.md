# Inner-parallel CNN / BCNN decision accelerator for a 60 GHz radio-over-fibre receiver

In a millimetre-wave radio-over-fibre link the received on-off-keyed signal is
distorted by fibre dispersion, photodetector square-law detection, amplifier
nonlinearity and inter-symbol interference. Instead of a chain of classic
equalisers, the receiver feeds a short window of samples into a small neural
network that decides the transmitted symbol directly. This RTL implements that
decision stage as an FPGA-style accelerator, for two networks:

* a **CNN** that computes in IEEE-754 single precision, and
* a **BCNN** (binarised CNN) whose first layer works on fp32 samples with ±1
  kernels and whose later layers work only on sign bits (XNOR and ±1 counting).

The main idea is the **inner-parallel schedule**. Each convolutional layer has
exactly two compute lanes, and they work inwards from the two ends of the
feature map. Lane A computes output position `i`, and in the same clocks lane B
computes position `LEN-1-i`. This halves the convolution time at the cost of a
second multiply-accumulate lane, and it needs far less hardware than unrolling
the loops. Activation (Leaky-ReLU) and max-pooling sit inside each lane, so a
lane emits pooled results directly.

## The two networks

Each decision takes a window of 16 received samples. Padding is "same" with
stride 1, so a layer keeps its length until it pools.

| CNN | operation | output |
|---|---|---|
| L1 | 8 kernels 1x3 on fp32, Leaky-ReLU, max-pool 2 | 8 x 8 fp32 |
| L2 | 16 kernels 1x3 over 8 channels, Leaky-ReLU, max-pool 2 | 16 x 4 fp32 |
| out | fully connected 64 -> 2, argmax | decision |

| BCNN | operation | output |
|---|---|---|
| L1 | 48 kernels 1x5, ±1 weights on fp32 samples (add/subtract), Leaky-ReLU, sign | 48 x 16 bits |
| L2 | 64 kernels 1x5 over 48 channels, XNOR/±1 sum, shift Leaky-ReLU, max-pool 2, sign | 64 x 8 bits |
| L3 | 72 kernels 1x5 over 64 channels, same as L2 | 72 x 4 bits |
| out | binary fully connected 288 -> 2, argmax | decision |

Leaky-ReLU is `f(x) = x` for `x >= 0` and `0.25·x` otherwise. The slope of 0.25 is
a power of two, so the "multiply" is a shift. In fp32 the shift is a subtraction
of 2 from the exponent, which is exact. For integer sums it is an arithmetic
shift right by 2.

## The inner-parallel schedule

The layers run one after the other. Inside a layer, a counter nest runs
`m` (output channel), then `i` (position pair, `0 .. LEN/2-1`), then `n` (input
channel), then `k` (tap). Each clock, both lanes do one tap:

```
lane A:  acc_A += X[n][i       + k - PAD] * K[m][n][k]
lane B:  acc_B += X[n][LEN-1-i + k - PAD] * K[m][n][k]
```

Both lanes use the same kernel word, so the parameter memory needs only one read
port. Each lane reads its own input sample. On the first tap of a position the
accumulator starts from the bias. A tap that falls into the padding adds nothing.
On the last tap the sum goes through Leaky-ReLU in the same clock.

Pooling falls out of the order. Lane A visits positions `0,1,2,3,...`, so after an
odd `i` it holds the pair `(i-1, i)` and writes `max` to `y[m][i/2]`. Lane B visits
`LEN-1, LEN-2, ...`, so on the same odd `i` it holds the pair
`(LEN-i, LEN-1-i)` and writes to `y[m][(LEN-1-i)/2]`. For `LEN = 16`:

```
i      : 0   1   2   3   4   5   6   7
lane A : 0   1   2   3   4   5   6   7   -> pools (0,1)->0 (2,3)->1 (4,5)->2 (6,7)->3
lane B : 15  14  13  12  11  10  9   8   -> pools (14,15)->7 (12,13)->6 (10,11)->5 (8,9)->4
```

The lanes never write the same pooled output, and together they cover it. `LEN`
must therefore be a multiple of 4 (both layers assert it). The BCNN first layer
has no pooling, so each lane writes every position it finishes.

**Timing.** A layer with `OUT_CH` kernels, `IN_CH` input channels, kernel size `KS`
and length `LEN` is busy for `T = OUT_CH · LEN/2 · IN_CH · KS` clocks. Its
registered `done` goes high on the `T`-th clock edge after the edge that sampled
`start`. The next layer starts on the following edge, so every hand-over costs
one clock.

| network | per-layer T | start -> done | at 100 MHz |
|---|---|---|---|
| CNN | 192 + 1536 + 128 (FC) | 1858 clocks | 18.6 µs |
| BCNN | 1920 + 122880 + 92160 + 576 (FC) | 217539 clocks | 2.18 ms |

A one-lane version of the same datapath would need 192 + 1536 more clocks for the
CNN (3586 in all). The BCNN cost is dominated by its binary layers. They do one
XNOR per lane per clock, and binary layer 2 alone has 64·16·48·5 taps.

## Number formats

**fp32 units** (`fp32_mul`, `fp32_add`) are combinational and round to nearest,
ties to even. The adder aligns the smaller operand into 24 significand bits plus
guard, round and sticky bits, and normalises after cancellation with a
leading-zero count. Subnormal inputs and results are flushed to zero, and
overflow saturates to infinity. NaN and infinity inputs get no special treatment,
because the networks do not produce them. `maxpool_fp32` compares sign-magnitude
words directly. `leaky_relu_fp32` tests the sign bit and subtracts 2 from the
exponent.

**Binary values** are stored as the sign: bit 1 means −1 and bit 0 means +1. The
product of two binary values is the XNOR of their bits (1 means +1). The
"sign()" binarisation turns a negative result into 1 and zero or positive into 0.
In the fp32 first layer a −0 also counts as +1.

**Binary sums** use 10-bit two's complement (`BIN_ACC_W`). This covers the largest
sum, 64·5 = 320 terms plus a bias. The binary output layer uses 12 bits.

## Loading parameters and data

The top has one write port for parameters and one for input samples. `net_sel`
selects which network receives parameter writes and which one a `start` runs. It
is sampled at `start`. Input samples are written to both networks' buffers
(`in_addr` 0..15, fp32). Parameter addresses are flat, per network:

| CNN address | content |
|---|---|
| 0 .. 23 | L1 kernels, index `m*3+k` |
| 24 .. 31 | L1 biases |
| 32 .. 415 | L2 kernels, index `(m*8+n)*3+k` |
| 416 .. 431 | L2 biases |
| 432 .. 559 | FC weights, index `o*64+j`, `j = c*4+p` |
| 560 .. 561 | FC biases |

| BCNN address | content |
|---|---|
| 0 .. 7 | L1 kernel bits, 32 per word: bit `b=m*5+k` at word `b/32`, bit `b%32` |
| 8 .. 55 | L1 biases (fp32) |
| 56 .. 535 | L2 kernel bits, `b=(m*48+n)*5+k` |
| 536 .. 599 | L2 biases (integer, low 10 bits) |
| 600 .. 1319 | L3 kernel bits, `b=(m*64+n)*5+k` |
| 1320 .. 1391 | L3 biases |
| 1392 .. 1409 | FC weight bits, `b=o*288+j`, `j=c*4+p` |
| 1410 .. 1411 | FC biases (integer, low 12 bits) |

All parameter memories (`param_ram`) are plain arrays with one synchronous write
port and one same-cycle read port. They add up to 60 kbit, which fits in on-chip
block or distributed RAM.

## Top-level ports (`rof_nn_accel`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, active-low synchronous reset |
| `net_sel` | in | `NET_CNN` (0) or `NET_BCNN` (1) |
| `in_we`, `in_addr[7:0]`, `in_data[31:0]` | in | write an input sample |
| `prm_we`, `prm_addr[15:0]`, `prm_data[31:0]` | in | write a parameter word of the selected network |
| `start` | in | run one decision; ignored while `busy` |
| `busy`, `done` | out | running; one-clock pulse when the result is valid |
| `decision` | out | index of the winning output neuron |
| `cnn_logits[2]` | out | fp32 outputs of the CNN |
| `bcnn_scores[2]` | out | signed 12-bit outputs of the BCNN |
| `latency_cycles`, `latency_valid` | out | clocks from start to done of the last run |

## Module hierarchy

```
rof_nn_accel                top: network select, latency_timer
├── rof_cnn3                CNN: input buffer, L1, L2, FC
│   ├── cnn3_conv_layer x2  counters, param_ram x2, two cnn3_lane
│   │   └── cnn3_lane       fp32_mul, fp32_add, leaky_relu_fp32, maxpool_fp32
│   └── cnn_fc_layer        serial fp32 MAC, argmax
├── rof_bcnn3               BCNN: input buffer, L1, L2, L3, FC
│   ├── bcnn3_fp_conv_layer two bcnn3_fp_lane (fp32_add as add/sub, leaky_relu_fp32, sign)
│   ├── bcnn3_bin_conv_layer x2  two bcnn3_bin_lane (XNOR, ±1, shift, pool, sign)
│   └── bcnn_fc_layer       serial XNOR/±1 sum, argmax
└── latency_timer
nn_pkg                      types (fp32_t, net_sel_e) and network sizes
```

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The references are independent of the RTL:

* `tb_fp_pkg` converts singles to double-precision reals exactly, computes there,
  and rounds back to single to nearest-even by bit manipulation. For a single add
  or multiply this gives the correctly rounded result. The fp32 unit tests run
  tens of thousands of random and corner operands against it.
* `tb_ref_pkg` holds the layers written straight from their equations: bias plus
  sum over channels and taps, padding, activation, pool and sign. It knows
  nothing of the two-lane order. The layer tests compare every output element and
  check the exact latency `T + 1`.
* `tb_rof_nn_accel` is the end-to-end test at full size. It loads random
  parameters into both networks and runs 11 CNN and 2 BCNN decisions, switching
  networks in between. It compares every logit, score, decision and timer reading
  with the reference. It also counts these events and fails if one never happens:
  both lanes producing results, padding taps, negative Leaky-ReLU inputs (fp32
  and integer), the pool picking the later position, a start ignored while busy,
  a network switch, and both decision values. It runs in about 10 s after
  compilation.
* `tb_rof_workload` runs symbol decisions on a synthetic received signal, since
  no measured radio-over-fibre data is at hand. The link is on-off keyed with 4
  samples per symbol, so a 16-sample window holds 4 symbols and the decision is
  for the third. Each sample gets half a symbol of smearing from the previous
  symbol with strength alpha, a square-law term and Gaussian noise. Alpha values
  of 0.10, 0.20 and 0.25 stand in for the three fibre lengths. Both networks get
  hand-set weights that turn them into threshold detectors for the centre symbol.
  In the CNN a pass-through channel and the two pools yield the maximum of
  samples 8..11, and the FC compares it with 0.7. In the BCNN, L1 takes the sign
  of a 5-sample sum minus 3.7. The +-1 weights of L2, L3 and the FC cancel across
  channels on every tap except the centre one. The bench runs 60 CNN and 6 BCNN
  windows per alpha. It fails on any bit error and on any decision that differs
  from the reference model. All runs are error-free.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/nn_pkg.sv tb/tb_fp_pkg.sv tb/tb_ref_pkg.sv tb/tb_rof_nn_accel.sv \
  --top tb_rof_nn_accel -o sim && ./obj_dir/sim
```

Other modules are found through `-Irtl`/`-Itb` by file name. The weights in the
unit and end-to-end tests are random and those in the workload test hand-set;
none are trained, so the bit-error rates of the source design's trained networks
are not reproduced here.

## Where this RTL follows the source design and where it chooses

Taken from the design as published:
* the two network shapes (kernel counts and sizes, feature-map sizes);
* fp32 arithmetic for the CNN and for the BCNN first layer;
* ±1 kernels applied by add/subtract in the BCNN first layer;
* XNOR and ±1 summation in the binary layers and in the binary output layer;
* Leaky-ReLU with slope 0.25, done as a shift;
* max-pooling of 2 and sign binarisation;
* the two-ended inner-parallel schedule with activation and pooling in the lanes;
* on-chip storage of all parameters;
* layers run in sequence.

Choices made here, where the description is silent or loose:
* **Input window 16, stride 1, "same" padding.** These are inferred from the
  printed lengths 16 -> 8 -> 4 (CNN) and 16 -> 16 -> 8 -> 4 (BCNN).
* **Two output neurons and an argmax decision.** The output-layer width is not
  given. Two fits one on-off-keyed bit per decision. Change `N_CLASS` in
  `nn_pkg` to change it.
* **Loop order.** The published algorithm loops over input channels outside the
  positions and keeps per-channel partial sums. Here each lane finishes a whole
  output position (all channels and taps) before moving on, so no partial sums
  are stored. The arithmetic is the same apart from the fp32 summation order,
  which is bias, then channels, then taps.
* **Pooling indices.** The published pseudo-code writes the pooled value with
  indices that read ambiguously. Here the pairs are (2j, 2j+1), as the feature-map
  sizes require.
* **Binary accumulator width.** The drawing of the binary lane labels its adder
  8-bit. That is too narrow for sums of up to 321 terms, so the adder is 10 bits
  wide.
* **No fSUB in the CNN.** The CNN convolution needs no subtraction here. fSUB is
  used only in the BCNN first layer.
* **Leaky-ReLU without a multiplier.** The published CNN datapath multiplies
  negative values by the slope with an fp32 multiplier. Here a negative value
  has 2 subtracted from its exponent instead. This gives the same result as
  multiplying by 0.25, except that values whose exponent would fall to zero or
  below are flushed to zero, like every other result here.
* **One tap per clock.** The MAC is combinational. A deeper fp32 pipeline would
  need the accumulation to be interleaved, and it is not modelled.
* **No SoC around the core.** The published system has a soft micro-controller,
  a DMA engine, an AXI interconnect, a BRAM controller, a UART and off-chip DDR3
  holding the received data. These are vendor parts and are not included. Their
  place is the simple load port. The timer is reduced to a start-to-done cycle
  counter.
* **Both networks behind one selector.** The published work builds the CNN and
  the BCNN as separate designs. Here they sit side by side behind `net_sel`.

The published latencies (hundreds of microseconds for the CNN, milliseconds for
the BCNN) include the processor, DMA and bus transfers for a batch of symbols of
unstated size, so they cannot be compared with the per-decision clock counts
above.
