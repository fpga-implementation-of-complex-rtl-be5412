# Clustered time-domain chromatic-dispersion filter (TDCE)

Synthesizable SystemVerilog for a chromatic-dispersion (CD) compensation
filter for coherent optical metro links, in which the taps of a
time-domain FIR filter are grouped into a handful of clusters so that the
filter needs one complex multiplication per cluster instead of one per tap.
The design follows the "time domain clustered equalizer" (TDCE) proposed by
Gomes, Freire, Prilepsky and Turitsyn (Aston University) for a 32 GBaud
dual-polarisation 16-QAM signal sampled at 2 samples per symbol, built there
with high-level synthesis for an AMD Versal (VCK190) FPGA at 250 MHz. The RTL
here is an independent register-transfer description of that filter; where
the publication leaves a detail open, the choice made here is stated below
and in the header comment of each file.

## The idea: taps that repeat on the unit circle

The ideal CD compensation filter for a fibre of length `z` has taps

    g_k = sqrt(j*a) * exp(-j*pi*a*k^2),      a = c*T^2 / (D*lambda^2*z)

(`c` speed of light, `T` sampling period, `D` dispersion coefficient,
`lambda` carrier wavelength, `k` tap index centred on zero). All taps have the
same magnitude `sqrt(a)`; only their phase changes, and it grows
quadratically with `k`. Once the phase has wrapped around the circle a few
times, many taps land on nearly the same point of the complex plane. If the
taps are grouped into `NC` clusters and every tap is replaced by its cluster's
centroid `C[c]`, the filter output can be factorised:

    y[n] = sum_k g_k x[n-k]
        ~= sum_c C[c] * ( sum_{k in cluster c} x[n-k] )

The inner sums are additions only. The outer sum needs `NC` complex
multiplications, i.e. `4*NC` real multiplications per output, against `4*N`
for the direct FIR with `N` taps. The clusters (tap-to-cluster map and
centroids) are found offline, once per link length; the published work uses a
k-nearest-neighbour search with 300 trials for the least complex filter that
still meets the bit-error-rate target.

Link parameters used throughout (32 GBaud, 2 samples per symbol so
`T = 15.625 ps`, `D = 16.8 ps/(nm km)`, `lambda = 1550 nm`, 80 km spans):

| spans | length | a         | full filter `2*round(1/(2a))+1` | truncated filter `N` | clusters `NC` | real mult. per symbol, FIR / clustered |
|-------|--------|-----------|------------------|-----|----|-----------|
| 1     | 80 km  | 0.02267   | 45               | 29  | 9  | 116 / 36  |
| 2     | 160 km | 0.01133   | 89               | 49  | 10 | 196 / 40  |
| 4     | 320 km | 0.00567   | 177              | 93  | 10 | 372 / 40  |
| 8     | 640 km | 0.00283   | 353              | 181 | 12 | 724 / 48  |

The full filter lengths and cluster counts are the published ones. The
truncated lengths are not stated as numbers in the publication; they are
inferred from its FIR complexity curve (116, 196, 372, 724 real
multiplications per symbol = `4*N`). The clustering is applied to the
truncated filter. The RTL defaults are the 4-span case: `N_TAPS = 93`,
`N_CLUST = 10`.

## Datapath

One unit filters one polarisation (one complex stream). A dual-polarisation
receiver uses two units; higher baud rates use more units in parallel.

```
 in_data ──► delay line ──► taps[0..N_TAPS-1] ─┐
 (2 sa/sym)  (N_TAPS x cplx)                   │       cluster map
                                               ▼       map[k] ∈ 0..N_CLUST
                                      per-cluster adders  (N_CLUST sums,
                                      sum[c] = Σ_{map[k]=c} taps[k])
                                               │  registered on sum_load
                                               ▼
                      mux clust_idx ──► complex multiplier ◄── centroid[clust_idx]
                                               │   (4 real mults)
                                               ▼
                                   accumulator + requantiser ──► output register ──► out_data
                                                                                    (1 sa/sym)
```

| file | block | role |
|------|-------|------|
| `rtl/tdce_pkg.sv` | package | 14-bit complex sample type, default sizes, config-target enum |
| `rtl/tdce_delay_line.sv` | delay line | last `N_TAPS` samples, all visible in parallel; `taps[0]` newest |
| `rtl/tdce_cluster_map.sv` | cluster map | cluster index of each tap, written through the config port |
| `rtl/tdce_centroid_mem.sv` | centroid table | `N_CLUST` complex centroids, read by cluster index |
| `rtl/tdce_cluster_sum.sv` | cluster adders | one exact balanced adder tree per cluster over the taps mapped to it (a tap not in the cluster contributes zero) |
| `rtl/tdce_cmult.sv` | multiplier | full-precision complex product, 4 real multiplications |
| `rtl/tdce_output_sum.sv` | output adder | accumulates the cluster products, truncates and clamps to 14 bits |
| `rtl/tdce_ctrl.sv` | controller | sequences intake, sum capture and the per-cluster multiply-accumulate |
| `rtl/tdce_top.sv` | unit | wires the above, streaming and configuration ports |

The cluster adders are parallel, one per cluster, as in the published block
drawing. The multiplier, on the other hand, is **shared**: the controller
walks the clusters one per clock cycle. The published implementation reports
18 DSP slices for the 4-span filter, fewer than the 40 real multipliers a
fully parallel version would need, so it also time-shared its multipliers;
how exactly is not described, and the one-multiplier schedule below is this
design's own.

## Schedule and rate

The controller repeats three phases for every output sample:

| phase | cycles | what happens |
|-------|--------|--------------|
| LOAD  | `DECIM` = 2 (more if the input stalls) | `in_ready` is high; each accepted sample shifts the delay line |
| SUM   | 1 | the per-cluster sums of the new delay-line contents are registered |
| MAC   | `N_CLUST` | cluster `c` = 0, 1, ...: `acc += sum[c] * C[c]`, restarting at `c` = 0 |

The finished accumulator is copied into the output register in the first
LOAD cycle of the next period, so with a continuous input and a ready sink
one output leaves every `DECIM + 1 + N_CLUST` cycles. At the defaults that is
13 cycles per 2 input samples, **0.154 samples per clock**. The published
FPGA filters were all built for 0.164 ± 0.012 samples per clock, so the
4-span unit lies inside that band (at 250 MHz: 38.5 Msample/s per unit).
`out_valid` rises `N_CLUST + 3` = 13 cycles after the clock edge that took the
second sample of a symbol (52 ns at 250 MHz; the published HLS design reports
0.55 µs, with a pipeline that is not described).

The output is decimated to one sample per symbol: an output is computed
after every second input sample. The publication counts complexity per
recovered symbol and its complexity figures match `4*N` and `4*NC` per
symbol, which is what this decimation gives; it does not state the output
rate in so many words.

Back-pressure: `out_valid` holds until `out_ready`. A finished result that
cannot yet be moved into the output register stays in the accumulator, and
the controller waits in SUM (input stopped) until it has moved, so nothing is
dropped. While the controller is in SUM or MAC, `in_ready` is low.

## Number formats

| quantity | width | format |
|----------|-------|--------|
| input samples, centroids, output samples | 14 + 14 bits (re, im) | signed, 5 integer bits (sign included), 9 fractional: range [-16, 16), step 2^-9 |
| cluster sums | 14 + ceil(log2 N_TAPS) = 21 bits | exact |
| complex product | 21 + 14 + 1 = 36 bits | exact, 18 fractional bits |
| accumulator | 36 + ceil(log2(N_CLUST+1)) = 40 bits | exact |
| output | 14 bits | accumulator shifted right by 9 (toward minus infinity), then clamped to [-8192, 8191]; `out_sat` flags a clamp |

The 14-bit word with 5 integer bits is the published one (the smallest that
met the 3.8e-3 pre-FEC BER threshold, for taps and signals alike). Keeping
every intermediate value exact, truncating toward minus infinity (the default
behaviour of HLS fixed-point types) and saturating the output are choices of
this design.

## Configuration

`cfg_we`, `cfg_sel`, `cfg_addr`, `cfg_data` write the two tables, one entry
per clock edge:

* `cfg_sel = CFG_MAP`: `map[cfg_addr] = cfg_data.re[3:0]`. A value of
  `N_CLUST` (10) or more switches the tap off. After reset every tap is off,
  so an unconfigured unit outputs zeros.
* `cfg_sel = CFG_CENT`: `centroid[cfg_addr] = cfg_data` (14-bit complex).

Tap position `k` is the sample `k` steps back in time (`k = 0` newest). To
load a filter of `N` taps (`N <= N_TAPS`), write its tap `m = k - (N-1)/2`
cluster label to `map[k]` for `k < N`, the unused code elsewhere, and the
centroids rounded to 9 fractional bits. Unused clusters should get a zero
centroid. Write the tables while no data flows; the delay line keeps its
contents across a reconfiguration.

A table held in registers and written at run time lets one unit serve every
link length up to its size; the published design does not say how its
coefficients were stored.

## Link lengths this unit holds

At the defaults (`N_TAPS = 93`, `N_CLUST = 10`):

* 1 span (29 taps, 9 clusters): fits; 64 taps and 1 cluster unused.
* 2 spans (49 taps, 10 clusters): fits; 44 taps unused.
* 4 spans (93 taps, 10 clusters): fits exactly.
* 8 spans (181 taps, 12 clusters): does not fit. Build with
  `N_TAPS = 181, N_CLUST = 12`; the period is then 15 cycles per 2 samples,
  0.133 samples per clock, below the published band. Reaching it would need
  a second multiplier, which this RTL does not have.

The rate does not depend on the loaded filter: the MAC phase always walks
all `N_CLUST` clusters.

## Verification

Each block has a self-checking testbench in `tb/` that compares the block
with values the testbench computes on its own and ends with a
`TB_RESULT checks=... failures=...` line:

| testbench | checks |
|-----------|--------|
| `tb_tdce_delay_line` | every tap against a model shift register under random `shift_en`; reset |
| `tb_tdce_cluster_map` | reset to "unused", random writes, out-of-range addresses ignored |
| `tb_tdce_centroid_mem` | random writes, all addresses read back, out-of-range reads zero |
| `tb_tdce_cluster_sum` | registered sums against tap-by-tap sums, unused taps, hold, full-scale inputs |
| `tb_tdce_cmult` | corner and random operands against 64-bit products |
| `tb_tdce_output_sum` | accumulation, truncation, clamping and the saturation flag |
| `tb_tdce_ctrl` | handshake rules, `DECIM` samples per output, cluster order, 13-cycle period, hold under back-pressure |
| `tb_tdce_top` | the whole unit at its default size, see below |
| `tb_tdce_spans8` | the same procedure for a unit built for 8 spans (`N_TAPS = 181`, `N_CLUST = 12`): 15-cycle period and latency, reconfiguration to the 1-span and 4-span filters |

`tb_tdce_top` designs the filter itself: it evaluates `g_k` above for the
given span count, clusters the taps with a plain k-means in the complex plane
(a stand-in for the published search), quantises the centroids and loads
them. It then streams random samples and compares every output bit for bit
with a direct-form FIR in which each tap is multiplied separately by its
centroid, so the factorisation into cluster sums is checked as well. It
checks the 13-cycle period and 13-cycle latency, and makes each of these
happen and counts them: input gaps, output back-pressure, the controller
holding a result, output saturation (with an input whose phases line up with
the taps), and reconfiguration to the 1-span and 2-span filters with taps
switched off. It also prints how far the clustered filter strays from the
unclustered quantised taps (about -17 dB error power for the plain k-means
used here; the published search, with 300 trials and a BER criterion, is
not reproduced).

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    --top-module tb_tdce_top rtl/tdce_pkg.sv tb/tb_tdce_top.sv -o sim
./obj_dir/sim
```

Simulation is two-state, so every block resets what it reads.

## What is not here

* The offline filter design: tap computation, truncation to the shortest
  filter meeting BER < 1e-3 and the cluster search. Its results enter through
  the configuration port; `tb_tdce_top` contains a simple version for
  testing.
* The frequency-domain (FFT overlap-save) equaliser the publication compares
  against.
* The board, clocking and the sample I/O of the FPGA platform.
* Placement of storage in block RAM: the published design uses BRAMs (with an
  18-bit write port) for purposes it does not describe; all storage here is
  registers.
* Power and area results. The energy advantage reported for the clustered
  filter (up to 63.5 % less energy per bit than the FFT equaliser at 1 span)
  came from FPGA power estimation and is not something this RTL can show by
  simulation.

## How far to trust it

The arithmetic of the filter (delay line, cluster sums, centroid products,
final sum) follows the published method exactly, and the testbenches check
it bit for bit. The schedule, the handshakes, the register placement, the
configuration port, the tap-off code, the rounding and saturation and the
truncated filter lengths are this design's own or inferred, as marked above.
The RTL has not been through FPGA place and route, so the 250 MHz clock is a
target, not a result.
