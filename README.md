# Stochastic-logic time delay reservoir

A reservoir computer turns a time series into a high-dimensional state
vector with a fixed, untrained recurrent network; only a linear readout on
that state is trained. A *time delay reservoir* needs just one physical
neuron: each input sample is held while the neuron is used N times in a
row, and a delay line feeds every result back N+1 steps later. The N
results form the state vector of N "virtual nodes", connected as a ring.

This RTL builds that neuron and its delay line in *stochastic logic*. Every
value inside the neuron is a random bit stream whose fraction of ones
encodes the number, so multiplication is one XNOR gate, weighted addition is
a multiplexer, and the non-linear activation is a multiplexer driven by a
small adder (a Bernstein polynomial). Binary words appear only at the
edges: the input sample, the parameters and the stored states are 16-bit
numbers that are converted to streams and back.

The design follows the architecture published in *An FPGA Implementation of
a Time Delay Reservoir Using Stochastic Logic* (Loomis, McDonald, Merkel).
Sizes, the block structure and the re-seeding method come from that
publication. Where it is silent (encodings, handshakes, seeds, the
sequencer), the choices made here are listed in the section "Departures and
choices".

## Numbers as bit streams

A value q in [-1, 1) is carried as a *bipolar* stream. Each bit is 1 with
probability p = (q+1)/2. So an all-ones stream is +1, an all-zeros stream
is -1, and a fair coin is 0.

- **Binary to stream (`b2s`).** A 16-bit LFSR produces one pseudo-random
  word per clock. The stream bit is 1 when that word, read as a signed
  number, is less than or equal to the 16-bit two's complement input
  (value = code / 2^15). The LFSR never holds zero. Over a full period
  (65535 clocks) the count of ones is therefore exactly code + 32768 for
  code >= 0, and code + 32769 for code < 0.
- **Stream to binary (`s2b`).** An up/down counter adds 1 for each '1' and
  subtracts 1 for each '0'. After S bits the count c is S times the value.
  S is a power of two, so c is scaled to a 16-bit word by a left shift
  (c * 2^15 / S). The one count that does not fit, c = +S, is clipped to
  +32767 and flagged.
- **Arithmetic on streams.** XNOR of two independent streams gives the
  stream of their product. A 2:1 multiplexer whose select stream is 1 with
  probability a gives a*x + (1-a)*y.

Precision grows with the stream length S: the result of one node has S+1
possible values, and its sampling noise falls as 1/sqrt(S).

## What one virtual node computes

Node i of the current sample takes S clocks (S = 2^len_log2, at most L =
128). Every clock, each block below produces one stream bit:

```
 u (held sample) --B2S--+
                        XNOR -- w_i*u --+
 w_i (mask)     --B2S--+                MUX(sel: P=alpha) --+
 x_(i-N-1) (delay line) --B2S-----------+                   MUX(sel: P=0.5) -- s_i
 theta (bias)   --B2S---------------------------------------+
```

so the stream s_i has the value

    s_i = ( alpha * w_i * u  +  (1 - alpha) * x_(i-N-1)  +  theta ) / 2 .

The neuron (`nonlinear_node`) computes x_i = f(s_i) with an order-n
Bernstein polynomial (n = 10):

```
 s_i --+------------------------------+
       +--D--+------------------------+ adder: v = number of ones
       +--D--D--+---------------------+ among n copies of s_i
       ...                            |   (delays 0..n-1 clocks)
                                      v
 beta_0..beta_n --B2S--> (n+1):1 MUX, select v  --> x_i stream
```

If the n copies behave like independent streams of probability p, then v
is binomial: Pr(v = k) = C(n,k) p^k (1-p)^(n-k). The output probability is
then sum_k beta_k * C(n,k) p^k (1-p)^(n-k). That is the Bernstein polynomial
with coefficients beta_k, which approximates any continuous function from
[0,1] to [0,1]. The delayed copies are only an approximation of independent
streams. Bits from the end of one node also spill into the first n-1
clocks of the next node, because the delay chain is not cleared.

The counter (`s2b`) turns the x_i stream into a 16-bit word at the end of
the node.

Default parameters: alpha = 0.6 and theta = 0.6 (the published values), and
beta_k = sin^2(2 (2k/n - 1)). This is f(s) = sin^2(gamma s) with gamma = 2,
with s in [-1,1] mapped onto the polynomial's [0,1] argument.

## The delay loop

`reservoir_state` holds an N-word shift register (50 x 16 bits by default)
and one extra *hold* word in front of the feedback converter. On the clock
that ends node i, two things happen together:

1. the oldest shift-register word moves into the hold word;
2. the new word x_i enters the shift register.

Before the shift, the oldest word is x_(i-N). So the node that starts next,
i+1, reads x_(i+1-(N+1)). The loop delay is N+1 node times, which is
what makes the virtual nodes a ring. Node i sees the state of node i-1 from
the previous sample, and node 0 sees node N-1 from two samples back. The
states are kept as binary words, not streams: a word costs 16 flip-flops,
while a stream would cost S.

## Sequencing and timing

`tdr_control` has a node index (0..N-1) and a bit counter (0..S-1).

- **Input handshake.** A sample is taken with a valid/ready handshake
  (`in_valid` && `in_ready`). It is written into the sample-and-hold
  register, and the stream length `len_log2` is latched with it. Node 0
  starts on the next clock.
- **One sample.** The N nodes run back to back, S clocks each. Node i's word
  appears on `node_x` (with `node_valid` and `node_idx`) (i+1)*S + 1 clocks
  after the accept.
- **End of a sample.** After node N-1 the whole state vector appears on
  `state_x` with `state_valid`. `state_x[0]` is the newest word (node N-1)
  and `state_x[N-1]` the oldest (node 0).
- **Throughput.** `in_ready` is high in the last clock of node N-1, so
  samples offered early follow with no gap: one sample every N*S clocks,
  which is 6400 clocks at N = 50, S = 128.
- **Stall.** If no sample is offered, the sequencer idles and raises
  `stall`. The LFSRs and the delay chain then hold still, and the state is
  kept.

## Random sources and re-seeding

The design has 17 LFSRs:

- one for each of u, w, theta and x;
- two for the alpha and 0.5 select streams;
- eleven for the Bernstein coefficients.

With free-running generators, each node sees different noise every time,
and a reservoir needs very long streams before similar inputs give similar
states. The published fix is to reload every generator, at the start of
every node, with a seed that belongs to that node. The noise is still
there, but it is the same for a node each time, so it works like a fixed
random distortion, not like fresh noise.

`reseed` is high on the clock before a node starts, and `seed_node` is that
node's index. Each converter computes its seed as a function of the node
index and its own source number (`tdr_pkg::node_seed`):

    seed = 0x8000 | ((low16(0x5A3CACE1 ^ src*0x3B5D9E37) ^ low16(node*0x4F1B)) & 0x7FFF)

The top bit is forced to one, so a seed is never the LFSR's all-zero
lock-up state. The lower 15 bits are one-to-one in the node index. The
input `reseed_en = 0` selects the other behaviour: seed once after reset,
then run freely. This is kept for comparison.

## Programming the reservoir

Parameters are written one per clock through `cfg_we`, `cfg_sel`, `cfg_idx`
and `cfg_data`, with `cfg_sel` of type `tdr_pkg::cfg_sel_e`:

| cfg_sel    | cfg_idx       | value written                                 | reset value          |
|------------|---------------|-----------------------------------------------|----------------------|
| CFG_WEIGHT | node 0..N-1   | mask weight w_i, bipolar code                 | hash of the index    |
| CFG_BIAS   | -             | theta, bipolar code                           | 0.6 (19661)          |
| CFG_ALPHA  | -             | alpha as an unsigned fraction alpha * 2^16    | 0.6 (39322)          |
| CFG_COEF   | k = 0..n      | beta_k, bipolar code (2*beta - 1) * 2^15      | sin^2 table, n = 10  |

Writes to an index out of range are ignored. Write between samples: the
mask is read live by the node that is running. The reset coefficient table
is only for n = 10; at any other order, write all n+1 coefficients before
use.

## Parameters

| parameter | default | meaning                                                          |
|-----------|---------|------------------------------------------------------------------|
| `Q`       | 16      | word width and LFSR width (LFSR taps for 8, 10, 12, 16, 20, 24, 32) |
| `N`       | 50      | virtual nodes, i.e. delay line length                            |
| `L`       | 128     | longest stream; `len_log2` picks 2^0..L per sample               |
| `ORDER`   | 10      | Bernstein order n                                                |
| `NW`, `IW`, `LW` | derived / 8 | node index, config index and length field widths       |

The published experiments use N = 20, 30, 40 and 50 and S = 16, 32, 64 and
128. Here N is a build parameter, because it sets the length of the delay
line. The stream length is chosen at run time, because only time depends
on it.

## Files

| file | content |
|------|---------|
| `rtl/tdr_pkg.sv` | sizes, source and config enums, LFSR taps, seed, mask and coefficient defaults |
| `rtl/lfsr.sv` | reseedable Fibonacci LFSR |
| `rtl/b2s.sv` | binary-to-stream converter |
| `rtl/s2b.sv` | stream-to-binary counter with scaling and clipping |
| `rtl/input_weighting.sv` | sample-and-hold, XNOR weighting, alpha and 0.5 multiplexers |
| `rtl/nonlinear_node.sv` | Bernstein polynomial neuron |
| `rtl/reservoir_state.sv` | delay line, its S2B and B2S converters, state outputs |
| `rtl/tdr_control.sv` | sequencer |
| `rtl/tdr_param_regs.sv` | mask, bias, alpha and coefficient registers |
| `rtl/tdr_top.sv` | the complete reservoir |

## Verification

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<m>`.

- `tb_b2s`, `tb_s2b`, `tb_input_weighting`, `tb_nonlinear_node`,
  `tb_reservoir_state`, `tb_tdr_control`, `tb_tdr_param_regs`: bit-exact
  comparison with reference models written from the description above
  (`tb/tb_ref_pkg.sv` holds the LFSR, seed and comparison rules). They also
  check stream statistics: exact ones counts over an LFSR period, the mixer
  output probability, and the Bernstein polynomial value at three points.
- `tb_tdr_top` runs the complete reservoir at its default size. A
  node-by-node model checks every output word and state vector bit for bit,
  through 17 samples. The run covers:
  - back-to-back samples and input stalls;
  - parameter writes between samples;
  - both seeding modes;
  - stream lengths 16, 64 and 128;
  - forced S2B clipping.
  It also checks the node latency and the sample period.
- `tb_wl_sine_square`, `tb_wl_narma10` and `tb_wl_channel_eq` run three of
  the standard benchmarks on the full-size reservoir. Each uses 1000
  training and 1000 test points, with a ridge regression readout computed
  in the testbench (`tb/tb_readout_pkg.sv`). The input sequences come from
  `$urandom`, so results move a little with the simulator seed. Results:

  | benchmark | stream length | result |
  |-----------|---------------|--------|
  | sine/square | 128 | 0 to 6.5 % errors (five seeds) |
  | NARMA10 | 16 / 128 | NMSE 0.89 / 0.75 |
  | channel equalisation | 16 / 128 | symbol error rate 0.46 / 0.49 |

  These agree with the published hardware results for this architecture:
  a few per cent error on classification, NMSE near 1 on NARMA10, and a high error rate on
  channel equalisation, well behind software models. The Santa Fe laser
  benchmark needs a recorded data set and is not included.

To run a testbench with Verilator 5, from the folder that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/tdr_pkg.sv tb/tb_ref_pkg.sv tb/tb_readout_pkg.sv \
    tb/tb_tdr_top.sv --top-module tb_tdr_top
./obj_dir/Vtb_tdr_top
```

For any other testbench, replace `tb_tdr_top` with its name. The unit
tests take well under a second each. Each full-size benchmark takes about
10 seconds, because it simulates 13 to 15 million clocks.

## Departures and choices

Taken from the publication:

- the block structure and stream arithmetic;
- the comparison rule of the B2S converter and the counting rule of the
  S2B converter;
- 16-bit LFSRs as wide as the binary input;
- loop delay N+1;
- per-node re-seeding;
- N = 50, S up to 128, alpha = theta = 0.6, gamma = 2;
- states stored as binary words.

The publication gives two values for the Bernstein order: n = 10 in its
text and n = 5 in a figure caption. This design uses 10.

Chosen here, because the publication leaves them open:

- the LFSR polynomials and the seed formula;
- which multiplexer input a select value of 1 picks;
- separate generators for the alpha and 0.5 select streams;
- the 16-bit state word format, and clipping of the +1 count;
- the extra hold word that makes the N-word shift register an (N+1)-long
  loop;
- the sequencer, its valid/ready input and the run-time stream length;
- the configuration port and all reset values other than alpha and theta;
- the exact shift and scale of sin^2 into the unit square.

Not included:

- **Analog-to-digital converter.** The input arrives already digitised on
  `in_sample`.
- **Host link and output buffer.** The serial link and the output storage
  used to move data to and from a host are not built; the state leaves on
  `node_x` and `state_x`.
- **Readout.** The trained readout is computed off-chip, as in the
  publication. The testbenches show how.

The published fixed-point comparison design is not part of this RTL.

The benchmark testbenches differ from the published runs in these ways:

- NARMA10 uses the product u(t-9)u(t), the usual form of the task. The
  published formula prints u(t)u(t-0), which reads as a typo.
- Sine/square uses one 1000-point training sequence and one 1000-point test
  sequence, with 8 points per wave period. The published runs used 20
  sequences of each kind and do not give the period.
- Channel equalisation uses the usual multipath channel and polynomial
  distortion for this task, with no added noise. The publication does not
  give the channel.
- Each benchmark is run once per stream length, not averaged over 20 trials.
- Only N = 50 is simulated. Other sizes need parameter `N` changed.
- Stream lengths must be powers of two from 1 to 128. Lengths such as 10,
  100 or 1000, used in the published noise study, are not available.
