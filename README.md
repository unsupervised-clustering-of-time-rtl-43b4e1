# A temporal-neural-network processor for online time-series clustering

This is an always-on clustering engine for short sensor signals (ECG beats,
motion snippets, spectra, and the like). It assigns each incoming signal to
one of K clusters and keeps learning while it runs, without labels,
backpropagation or floating point. It follows the temporal neural network (TNN)
approach to unsupervised time-series clustering. Information is carried by
*when* a neuron spikes, not how often it spikes. Neurons integrate
ramp-shaped responses with 3-bit weights, a one-winner-take-all column picks
the cluster, and a stochastic spike-timing-dependent plasticity (STDP) rule
adapts the weights after every signal.

The processing chain for one signal:

```
 raw samples ──► sparse random ──► Gaussian receptive ──► encoding neurons
 (L, signed)     projection         fields (E per value)   (E*ELL spike times)
                 (ELL values)                                     │
                                                                  ▼  3-bit weights
 cluster id ◄── 1-WTA lateral ◄── K ramp-no-leak neurons ◄── (K x E*ELL array)
 + spike time    inhibition                                       ▲
                      └──────────── STDP update ──────────────────┘
```

All of this is RTL in `rtl/`. Each block has a self-checking testbench in
`tb/`.

## Sizes

| symbol | meaning | default | origin |
|---|---|---|---|
| E | receptive fields (encoding neurons) per projected value | 8 | method |
| L | maximum raw signal length | 270 | chosen: largest named network (WordSynonyms) |
| ELL | projected values, floor(L/8) | 33 | method's rule |
| S = E·ELL | synapses per processing neuron | 264 | |
| K | processing neurons = clusters | 25 | chosen: WordSynonyms has 25 classes |
| T_max | spike-time window; T_max means "no spike" | 16 | method |
| w_max, WBITS | weight range and width | 7, 3 | method |
| XW | raw sample width | 8 | chosen |
| LANES | synapses updated per STDP cycle | 8 | chosen |

The sizes in use (signal length, projected values, neurons) are also run-time
registers. One instance therefore serves any smaller network. A 65-sample,
2-cluster data set, for example, uses `CFG_LEN=65, CFG_ELL=8, CFG_K=2`.
Networks with longer signals need a larger `L` and `ELL` at elaboration: a
637-sample signal needs `L=637, ELL=79`.

## Encoding: from samples to spike times

**Random projection (`rand_proj`).** The signal x[0..L-1] is reduced to ELL
values, x~_i = Σ_n x[n]·P[n][i]. P is a sparse ternary matrix with entries
+1, 0 and −1 at probabilities 1/6, 2/3 and 1/6 (the Achlioptas form of a
Johnson–Lindenstrauss projection). The usual factor √3 is omitted: the next
stage normalises every column by its own range, so a common scale cancels.

P is never stored. Entry P[n][i] is recomputed from a 32-bit integer hash of
(`PROJ_SEED`, n, i) in the cycle where sample n arrives. Every signal
therefore sees the same matrix, with no memory. The hash (two
multiply–xorshift rounds) is defined in `tnn_pkg::proj_hash`. The value `(h[15:0]·6) >> 16`, which lies in 0..5, selects the entry: 0 gives
+1, 1 gives −1, and 2..5 give 0. All ELL accumulators update in parallel, one sample per cycle.

**Column ranges (`col_range`).** Receptive fields are placed per column using
that column's minimum and maximum over the data set. The host can write them
(`xmin[i]`, `xmax[i]`), or they can be learned: write `CFG_CAL_CLR`, set
calibration mode, and stream the data set once. Each projected value then
updates its column's running min and max, and no result is produced.

**Gaussian receptive fields (`grf_encoder`).** Value x of column i drives E
encoding neurons. Neuron j has a Gaussian of width
σ = γ(xmax − xmin)/(E − 2), centred at μ_j = xmin + ((2j − 3)/2)·σ. It fires at

    t_j = round(T_max · (1 − exp(−((x − μ_j)/σ)² / 2)))

so the neuron whose centre is nearest fires first, and T_max means silence.
The hardware evaluates no exponential. It forms the normalised coordinate
u = (x − xmin)(E − 2)/(γ(xmax − xmin)) with one integer division, to 1/64
(truncated toward zero). Then (x − μ_j)/σ = u − j + 3/2. The square a² of its
magnitude is compared with T_max constants, and t_j is the number of
constants reached. Constant k is the smallest a² that rounds to at least k:

    a² ≥ −2·ln(1 − (2k − 1)/(2·T_max)),   k = 1..T_max

`tnn_pkg::grf_a2_threshold` computes these at elaboration with integer
arithmetic only (an atanh series), rounded up to the 2^-12 grid of a². The
result is exactly round-half-up of the formula above, applied to the
quantised u. γ is an unsigned Q4.4 register that resets to 1.0.

**Encoding neurons (`encoding_neurons`).** This block holds the E·ELL spike
times, with neuron index j = i·E + e. During the forward pass it raises
`spike[j]` in the tick equal to t_j.

## The processing column

**Ramp-no-leak neurons (`rnl_neuron`).** Neuron k's body potential is

    v_k(t) = Σ_j ρ(t − t_j, w_kj),   ρ(t, w) = 0 (t < 0), t (0 ≤ t < w), w (t ≥ w)

Each input contributes a ramp that starts at its spike time, rises by one per
tick, and saturates at its weight. There is no leak. The key to the hardware
is that ρ grows by exactly one per tick while t_j ≤ t < t_j + w_kj. The neuron
therefore keeps v in a register and, once per tick, adds a population count of
the synapses currently on their ramp. At tick t it first compares v(t) with θ:
the first tick with v(t) ≥ θ is its spike time, and only one spike is
allowed. Then it advances to v(t+1). The forward pass lasts T_max ticks, and a
neuron that never reaches θ reports T_max. The potentials are cleared before
every pass. θ is a register; no value is prescribed for it.

**Lateral inhibition (`wta_inhibit`).** Among the neurons in use, the earliest
spike wins. Ties go to the lowest index. Every other neuron's time is forced
to T_max, and this inhibited vector is what STDP sees. If no neuron fired, all
times stay T_max, and the reported cluster is the neuron with the largest
potential at the end of the window, v(T_max) (lowest index on ties). The
result port gives the cluster and the winning spike time; an earlier spike
means a more confident assignment. `res_spiked` tells the two cases apart.

## Learning: stochastic STDP (`stdp_unit`)

After each forward pass (with learning enabled), every weight w = w_kj moves
by at most one step:

| encoding neuron j | processing neuron k (after WTA) | Δw |
|---|---|---|
| spiked | silent | +X_s |
| spiked, t_j ≤ t_k | spiked | +X_c · max(S_P(w), X_min) |
| spiked, t_j > t_k | spiked | −X_c · max(S_N(w), X_min) |
| silent | spiked | −X_b · max(S_N(w), X_min) |
| silent | silent | 0 |

The result is clamped to [0, w_max]. X_s, X_c, X_b and X_min are Bernoulli
draws with programmable probabilities π_s, π_c, π_b and π_min. The method
asks for π_s < π_c < π_b, so weights grow cautiously. S_P and S_N are the
weight-dependent "stabilisers": P[S_P = 1] = (w/w_max)(2 − w/w_max) and
P[S_N = 1] = (1 − w/w_max)(1 + w/w_max). High weights are easy to raise and
hard to lower, low weights the reverse, so the weights settle near 0 or
w_max. The max of two bits is their OR.

Because of inhibition, only the winner ever has a spike time below T_max. The
winner's synapses are potentiated where the input came in time and depressed
where it came late or not at all. Every loser (and every neuron, when nothing
fired) slowly potentiates its active inputs through X_s, which eventually lets
an unused neuron capture a new pattern.

The hardware works through the array LANES synapses per cycle: neuron by
neuron, in aligned lane groups. It takes k_used·⌈S/LANES⌉ cycles (825 at the
defaults) and uses the weight array's read-modify-write port. Each lane has
its own 64-bit xorshift generator, reseeded by writing `CFG_SEED`. Bits
[15:0] draw X_s, X_c or X_b, bits [31:16] draw X_min, and bits [47:32] draw
S_P or S_N. Probabilities are 16-bit codes p/65536, and the all-ones code
means "always". The S_P/S_N probabilities for each 3-bit weight are constants
built at elaboration from the formulas (`tnn_pkg::sp_prob`, `sn_prob`).

## Sequencing and interface (`tnn_ctrl`, `tnn_top`)

| phase | cycles | what happens |
|---|---|---|
| IDLE | 1 | first `s_valid` seen; projection accumulators cleared |
| PROJ | cfg_len (+ stalls) | one sample per `s_valid && s_ready` |
| ENC | ELL | value i encoded (or, in calibration mode, folded into the ranges) |
| FIRE | T_max | ticks 0..T_max−1 |
| WTA | 1 | result latched; `res_valid` pulses on the next cycle |
| STDP | k_used·⌈S/LANES⌉ | only with learning on |

Configuration goes over a simple write bus (`cfg_we`, `cfg_addr[15:0]`,
`cfg_wdata[31:0]`). Address bits [15:12] select a space:

| space | registers |
|---|---|
| 0 | addr[3:0]: 0 mode (bit0 learn, bit1 calibrate), 1 θ, 2 γ (Q4.4), 3–6 π_s, π_c, π_b, π_min, 7 STDP seed (write reseeds), 8 signal length, 9 projected values in use, 10 neurons in use, 11 clear calibration |
| 1 | xmin[i], i = addr[11:0] (signed) |
| 2 | xmax[i] |

Single weights are written and read through `w_we/w_k/w_j/w_wdata/w_rdata`.
This is useful for loading a trained network or inspecting one. If the host
and the STDP sweep write the same weight in one cycle, the STDP write wins.
Reset sets all weights to `W_INIT` (3). Writing configuration registers while
`busy` is high takes effect at once; avoiding that is up to the host.

A typical session: set sizes, θ and γ; calibrate over the data set; set the
STDP probabilities and seed; then stream signals with learning on for a few
epochs (or indefinitely, for continuous adaptation). Read `res_cluster` per
signal. Turn learning off for pure inference.

## Differences from the source method, and choices made here

- **Fixed-point encoding.** The method computes spike times from real
  Gaussians. Here u is quantised to 1/64 before rounding. Spike times match
  the formula applied to the quantised u; against unquantised u they can
  differ by one tick near rounding boundaries.
- **No √3 in the projection**, and a hashed rather than stored matrix. Both
  are exact or equivalent in effect, as explained above.
- **Column ranges by calibration pass.** The method takes them over the
  training set offline; here they are either written or learned in hardware.
- **Threshold rule.** The prose says a neuron spikes when its potential
  *exceeds* θ; the formal definition uses v ≥ θ. This design follows ≥.
- **No-spike case.** The winner is chosen by the largest potential at the end
  of the window, v(T_max). For STDP the no-spike case means all outputs are
  T_max, which is the rule table's "silent" case.
- **Unspecified values** are registers or parameters: θ, γ, the four π, the
  initial weight, the sample width, the random generators and the
  update order.
- **Synapse counting.** The hardware has E·ELL·K synapses (6600 at the
  defaults). The source's hardware table counts 6750 for its largest network
  and 130 for its smallest, which equals L·K rather than E·ELL·K.
- **Timing.** The source reports an analytic ~5 ns processing delay for the
  neuron column in 7 nm CMOS. This design is synchronous: one tick per clock
  cycle. At the defaults a signal takes 270 + 1 + 33 + 16 + 1 = 321 cycles
  to a result, plus 825 STDP cycles before the next signal when learning.
- **Not modelled:** the sensor and ADC in front of the processor, and the
  process-specific area and power figures.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | checks |
|---|---|
| `tb_rand_proj` | projected sums against a local copy of the matrix hash; sample count; the ±1/0 proportions |
| `tb_col_range` | host writes; calibration min/max over random data |
| `tb_grf_encoder` | 24k spike times against floating-point Gaussians; silent unused columns |
| `tb_encoding_neurons` | storage order; exactly one spike at the stored time |
| `tb_synapse_weights` | reset, host and lane-group paths; write priority |
| `tb_rnl_neuron` | spike time and final potential against the ρ-sum definition over 600 random cases |
| `tb_wta_inhibit` | earliest-spike, tie and no-spike rules |
| `tb_stdp_unit` | every row of the rule table exactly; clamping; S_P and S_N rates against their formulas; sweep length |
| `tb_tnn_ctrl` | registers and phase lengths in inference, learning and calibration modes |
| `tb_tnn_top` | end to end at reduced size (32-sample signals, ELL = 4, K = 3) |
| `tb_tnn_full` | the top at its default size through calibration, inference and one learning step |

`tb_tnn_top` builds three noisy signal shapes, calibrates, and checks every
inference result against a reference model (`tb/tnn_ref_pkg.sv`) fed with the
weights read back. The reference uses its own projection hash, floating-point
encoding, ρ-sum neurons and 1-WTA. The test also covers ties, the no-spike
fallback, input stalls and mode switches. It learns online for 12 epochs and
then requires a Rand index of at least 0.6 against the true shapes. It
reaches 1.0.

`tb_tnn_full` checks three inferences against the reference at full size, a
STDP phase of exactly 825 cycles, and that no weight moves by more than one
step. It runs in well under a minute.

To run a testbench with Verilator (from the folder that holds `rtl/` and
`tb/`):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/tnn_pkg.sv tb/tnn_ref_pkg.sv \
          tb/tb_tnn_top.sv --top tb_tnn_top -o sim && ./obj_dir/sim
```

Replace `tb_tnn_top` with any testbench name. `tnn_pkg` must come first; the
other modules are found by file name. `-Wno-fatal` keeps width warnings in
the testbenches from stopping the build.
