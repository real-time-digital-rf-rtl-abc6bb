# Direct-path RF channel emulator in SystemVerilog

An RF channel emulator sits between real radios, radars or other RF systems.
It gives each of them a digitised copy of the signals the others would
receive in a chosen scene: objects at given distances, moving with given
velocities, with their antennas and their scattering behaviour. A tapped
delay-line (TDL) emulator computes one long filter from every object to
every other object. That costs O(N^3 K) operations per sample for N
objects with K scattering points each.

This design uses the **direct-path model**. Every object becomes a
*computational node*, and the nodes are joined in a fully connected graph.
A node never sees the whole scene. It receives the N-1 signals arriving from
the other objects, and it sends each of them the signal that leaves it in
that object's direction: its own transmission plus everything it scatters.
Multi-bounce paths (A -> B -> C -> A) come out of that exchange by
themselves. The design has one rule that makes this cheap: the scattering
of point k factorises into an incoming and an outgoing response,
`sigma_k(theta_in, theta_out) = alpha_k(theta_in) * beta_k(theta_out)`.
With that rule a node first collapses its N-1 inputs into K *intermediate
signals*. Only those K signals are kept across the long propagation delay,
and each output is formed from them. The cost drops to O(N^2 K) per sample,
and the memory per node to O(K L), where L is the longest delay.

The RTL implements that node and a top level that connects N of them.
Around them it adds:
- the fractional-delay filtering,
- the path-loss and Doppler stage of each link,
- the per-period parameter update,
- an engine that evaluates angle-dependent gains from spherical-harmonic
  coefficients.

## The node equations

For node m, with `s_n` the signal arriving from node n and `s_m` its own
transmitter:

```
v_k(t)   = sum_{n != m} alpha_{k,n} s_n(t - tau_{n,k})                     k = 1..K
y'_l(t)  = G_l s_m(t - tau_l) + sum_k beta_{l,k} v_k(t - tau_l + tau_{k,l})
y_l(t)   = C_l exp(-j phi_l(t)) y'_l(t)                                     to node l
r(t)     = sum_{n != m} Grx_n s_n(t - tau_{n,r})                            receiver output
```

- `alpha_{k,n}` is scatterer k's response towards neighbour n.
- `beta_{l,k}` is its response towards destination l.
- `tau_{n,k}` and `tau_{k,l}` are the small signed travel-time offsets
  between the object's phase centre and scatterer k.
- `tau_l` is the link delay (distance / c).
- `G_l` and `Grx_n` are the antenna gains towards l and n at the current
  steering.
- `C_l` is the path loss.
- `phi_l(t) = 2 pi f_c (v_r / c) (t - tau_l)` is the first-order Doppler
  phase.

A node with no transmitter has `G = 0`, and one with no receiver has
`Grx = 0`. A node that does not scatter has `alpha = beta = 0`. Radars,
base stations and passive reflectors are therefore all the same hardware.

## Block structure

```
                   dp_emulator (N nodes, fully connected)
  tx_in[m] ---> +-------------------- dp_node m ---------------------+
                |  param_bank (shadow/active, swap every period)     |
  s_link[m][n]->|  intermediate_former --v_k--> output_former --y'--> link_modulator --> y_link[m][l]
                |  (short histories)            (2^23 long buffers)   (C, Doppler)  |
                |  receiver_combiner ------------------------------------------------> rx_out[m]
                |  sh_eval (spherical harmonics -> weights) --> param_bank           |
                +----------------------------------------------------+
  y_link[m][l] --LINK_REGS registers--> s_link[l][m]
```

| module | does |
|---|---|
| `dp_pkg` | sample, weight and delay types; table enum for the parameter port; rounding/saturation helpers |
| `frac_interp` | 4-tap quadratic-spline fractional-delay filter |
| `sample_buffer` | circular history, several read ports, 4 taps per read |
| `delay_weight_sum` | helper: NOUT weighted sums of NIN fractionally delayed streams |
| `intermediate_former` | the K intermediate signals v_k |
| `output_former` | long buffers of v_k and s_m, the N outputs y'_l |
| `receiver_combiner` | receiver output r |
| `link_modulator` | path loss and Doppler rotation of one link |
| `param_bank` | double-buffered scenario parameters of one node |
| `sh_eval` | spherical-harmonic evaluator writing weights into the bank |
| `dp_node` | one computational node |
| `dp_emulator` | the top: N nodes, the network, the host ports |

## Numbers and formats

| quantity | format | note |
|---|---|---|
| signal samples | complex, 16-bit I and 16-bit Q, full scale +/-1 | all rounding is to nearest, all results saturate |
| weights alpha, beta, G, Grx | complex Q2.14 (range +/-2) | |
| delays | unsigned 32-bit, 8 fraction bits (1/256 sample) | short offsets are read as signed |
| path loss C | 17-bit mantissa Q1.16 and a 5-bit extra right shift | |
| Doppler | 32-bit phase step and start phase, in fractions of a turn | |
| default sizes | N = 3 nodes, K = 16 scatterers, 4-tap filters, long buffers 2^23 samples | 2^23 covers 500 km at 2.5 GS/s |
| update period | 3,250,000 samples | 1.3 ms at 2.5 GS/s |
| spherical harmonics | up to P = 256 coefficients per response, 16,384 coefficient words per node | |

All word lengths are choices of this design; the model itself prescribes none.

## Fractional delays

Every path in the model has a delay that is generally not a whole number of
samples. Each delay is split in two. The integer part addresses a
`sample_buffer`, which returns four consecutive samples
`x(t-n+1), x(t-n), x(t-n-1), x(t-n-2)`. The fraction `mu` drives a 4-tap
quadratic-spline interpolator (`frac_interp`). Its taps are computed from
`mu` on the fly:

```
h(-1) = h(2) = (mu^2 - mu)/2,   h(0) = 1 - mu/2 - mu^2/2,   h(1) = 3 mu/2 - mu^2/2
```

This is the piecewise-parabolic Farrow interpolator with its free parameter
set to 1/2. The filter is exact at `mu = 0` and its taps sum to one. Four
taps are adequate when the signal is about 25 % oversampled, for example a
2 GHz band sampled at 2.5 GHz. The particular spline is this design's
choice, since the model only asks for a 4-tap quadratic spline. The fraction
has 8 bits, so there are 256 delay settings between two samples.

## Timing: how delays stay exact through pipelines

This is the least obvious part of the design. Every node runs one complex
sample per clock, and all nodes share one sample strobe, `in_valid`. That
strobe must stay high for the whole run, which an assertion in the top
checks. Delays are therefore counted in clocks, and every fixed pipeline
latency must be taken out of the programmed delays:

- **Short signed offsets.** `tau_{n,k}`, `tau_{k,l}` and `tau_{n,r}` may be
  negative, because a scatterer can sit in front of the phase centre. The
  input side adds a bias of `TAU_BIAS = 64` samples before it reads its
  256-deep short histories. As a result `v_k` and `r` come out 64 samples
  late. The output side subtracts the same 64 when it reads `v_k`, so the
  scattered path has no net bias. The receiver output keeps the 64-sample
  latency as a fixed offset of the emulator.
- **Node and link latency.** A link output leaves a node 8 clocks after the
  input sample it belongs to:
  - 3 clocks in the input stage,
  - 3 clocks in the output stage,
  - 2 clocks in the link modulator.

  It then passes `LINK_REGS = 1` network register before it reaches the next
  node. The node reads its long buffers at `tau_l - LINK_LAT`, with
  `LINK_LAT = 9`. The delay from one node's input to the next node's input
  is therefore exactly `tau_l`. Link delays must be larger than `LINK_LAT`
  samples, which any real geometry is.
- **Transmit alignment.** The node's own transmit signal is delayed 3 clocks
  so that it enters the long buffers together with the intermediate signals
  of the same sample time.
- **Receiver.** `rx_out` follows the samples that arrive at the node by
  3 clocks plus `TAU_BIAS` samples.

## Parameter updates

Geometry changes slowly against the sample rate, so the scenario host
recomputes each node's numbers once per update period of 1.3 ms. Those
numbers are:
- delays;
- the gains alpha, beta, G and Grx, for the current angles and steering;
- path loss;
- the Doppler step and start phase.

Each `param_bank` keeps two copies. The host writes the shadow copy while the
datapath reads the active one. The two copies are swapped between two
samples:
- every `UPDATE_SAMPLES` samples;
- at once when `force_update` is pulsed, which is how a run is started.

The link modulator reloads its phase accumulator and path loss on the first
sample of each new period. That update marker travels with the samples, so a
sample is always processed with one period's path loss and phase.

There is one documented imperfection at a swap. The delays and weights of
the input stage and of the output stage both change at the same clock. The
output stage works on samples that are 3 clocks older, so for those 3 clocks
at the boundary it combines old samples with new weights. At 3 samples out
of 3.25 million this is far below the model's own approximation error.

## Angle-dependent gains: `sh_eval`

Antenna and scattering responses depend on angle, and tabulating them is too
large. Both are instead stored as spherical-harmonic expansions: a response
`g(theta) = psi(theta)^T b` holds P complex coefficients b. Array antennas
use a rank-D form:

```
G(theta^s, theta) = sum_d conj(g^s_d(theta^s)) g_d(theta)
```

Here theta^s is the steering direction, and the form needs 2PD
coefficients. Each node's `sh_eval` holds the coefficients and two basis
vectors:
- `psi0 = psi(theta)`;
- `psi1 = psi(theta^s)`.

It computes one of two forms:
- `SINGLE`, which is `psi0^T b` and gives alpha_k and beta_k;
- `PAIR`, which is the rank-D sum above and gives G and Grx.

It does one complex multiply-accumulate per clock, so SINGLE takes P+2
clocks and PAIR takes 2DP+2 clocks. The result is written straight into the
node's shadow bank. If the host writes the same node in that clock, the
host write is refused (`hw_ready` low) and has to be repeated. The basis
values `psi(theta)` are supplied by the host together with the angles;
evaluating spherical harmonics at an angle is outside the chip.

## Using it

Ports of `dp_emulator`:

- **Streaming:**
  - `in_valid`: hold it high from the first sample on.
  - `tx_in[m]`: each object's transmit samples.
  - `rx_out[m]` and `rx_valid`: each object's receiver samples.
- **Host parameter writes:** `hw_en`, `hw_node`, `hw_table`, `hw_row`,
  `hw_col`, `hw_data`, answered by `hw_ready`. Tables and their indexing are
  listed in `dp_pkg::ptable_e`:
  - `T_ALPHA[k][n]`
  - `T_TAU_IN[k][n]`
  - `T_BETA[l][k]`
  - `T_TAU_SC[l][k]`
  - `T_GTX[l]`
  - `T_TAU_OUT[l]`
  - `T_GRX[n]`
  - `T_TAU_RX[n]`
  - `T_PL[l]`: mantissa in bits 16:0, shift in bits 21:17.
  - `T_DOP_INC[l]`
  - `T_DOP_PH0[l]`
  - Weights are written as `{re, im}`. Delays are in 1/256 sample.
- **Spherical-harmonic engine of node `sh_node`:**
  - `sh_coef_*` writes coefficients.
  - `sh_psi_*` writes basis vectors.
  - `sh_cmd_*` starts an evaluation, with `sh_cmd_ready` as its handshake.
- **`force_update`:** swaps all banks at once.

A typical start:
1. Reset.
2. Load all tables, or load coefficients and issue `sh_cmd` commands.
3. Pulse `force_update`.
4. Raise `in_valid`.

During the run, write the next period's numbers into the shadow banks. They
take effect at the next period boundary.

Simulating with plain Verilator, using the end-to-end test as the example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  --top-module tb_dp_emulator \
  rtl/dp_pkg.sv tb/tb_ref_pkg.sv tb/tb_node_model_pkg.sv tb/tb_dp_emulator.sv
./obj_dir/Vtb_dp_emulator
```

Every testbench ends with the line `TB_RESULT checks=<n> failures=<n>`.

## Verification

The reference for every check is the model itself, evaluated in real
arithmetic (`tb_ref_pkg`, `tb_node_model_pkg`): the four equations above with
the same spline interpolation and the design's documented fixed offsets.
The hardware result must agree within a few LSB.

- **Unit tests** (`tb_<module>`): one per block, with random data, weights
  and delays. Each also checks the latency in clocks: 1 for the filter and
  the buffer, 3 for the formers, 2 for the modulator, and P+2 or 2DP+2 for
  the evaluator.
- **`tb_dp_node`:** one node over two update periods. The next period's
  Doppler and path loss are written mid-run and must switch exactly at the
  boundary.
- **`tb_dp_emulator`:** three nodes, with a reduced long buffer of 4096 and
  an update period of 700. The scene is two radars and a moving two-point
  reflector whose weights are evaluated by `sh_eval`, plus a steered
  rank-2 array gain. The coupled models of all three nodes predict every
  receiver sample. The test counts each mechanism and fails if any never
  occurs:
  - direct reception;
  - two-hop echoes;
  - Doppler;
  - periodic and forced swaps;
  - SINGLE and PAIR evaluations;
  - host writes refused by `hw_ready`.
- **`tb_dp_emulator_full`:** the same scene at the default sizes, with no
  parameter overridden: 2^23-sample buffers, K = 16, a 3.25M-sample period.
  It uses the geometry of a two-radar interferometry experiment: radars
  4 km apart and a reflector 8 km from both. Echoes return after about
  133,400 samples. It checks 400,000 receiver samples in about half a
  minute and needs about 1.8 GB of memory. The periodic swap is not reached
  at this size, because a period is 3.25 million samples.
- **`tb_sh_eval_workloads`:** the evaluator at its default sizes on two
  workloads. The first is a steered 13x13 array (D = 169, P = 16) in the
  PAIR form, which takes 5,410 clocks per gain. The second is a 16-point
  scatterer with P = 256 expansions: all 32 alpha and beta values in the
  SINGLE form.

## What it can hold

- **Interferometry scene.** Three objects; the 8 km one-way delay is 66,713
  samples, within the 2^23 buffer. It runs at the default sizes.
- **Steered 13x13 array.** D = 169 and P = 16 need 2PD = 5,408
  coefficients, within 16,384. One evaluation takes 5,410 clocks.
- **Anisotropic scatterer.** 16 points with order-15 expansions (P = 256)
  need 2KP = 8,192 coefficients.
- **Large scenes.** Scenes of hundreds of objects need the parameter N
  raised. Memory grows by 17 long buffers per node, about 4.6 Gbit at 2^23
  samples each.

## Departures and limits

- **One sample per clock.** Real time at 2.5 GS/s would need a 2.5 GHz
  clock or a parallel (multi-lane) datapath, which this design does not
  provide.
- **Memory model.** The long buffers are plain arrays that map to large
  RAMs. At the default size, a synthesis flow needs external or macro
  memory.
- **Inter-node network.** The network is a register stage per link. A
  multi-chip link with its own latency only needs `LINK_LAT` adjusted.
- **Outside the chip.** Several things are done by the scenario host or
  other hardware, not by this design:
  - turning positions, velocities and orientations into delays, path loss,
    Doppler steps and angles;
  - evaluating the basis functions `psi(theta)`;
  - the RF front end (mixing, ADC, DAC).
- **Parameter skew at a swap.** See "Parameter updates": 3 samples per
  period use old samples with new weights.
- **Own choices.** The receiver output carries a fixed 64-sample offset, and
  short offsets must lie between -63 and +189 samples. At 2.5 GS/s,
  63 samples is about 7.5 m. Both follow from the short-buffer size, which is this design's
  own choice.
