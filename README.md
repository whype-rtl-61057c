# WHYPE datapath: bundling hypervectors over the air

Hyperdimensional computing (HDC) classifies by comparing a query hypervector
(here 512 bits) with stored class prototypes. A common trick is to *bundle*
several queries into one by a bit-wise majority, so one similarity search
serves several inputs. In a system scaled out to many encoder chiplets and
many in-memory-computing (IMC) search chiplets, that bundling is expensive
when wired: all queries must travel to one majority circuit, and the result
must then be broadcast to every search engine.

WHYPE removes both steps. All M encoder chiplets transmit their queries at
the same time, bit by bit, on one shared 60 GHz in-package wireless channel.
Every transmitter sends each bit as one of two carrier phases that were
chosen offline. The phases are picked so that the superposition seen at
every receiver falls into two separable clusters: one for "majority of the
transmitted bits is 0" and one for "majority is 1". Each of the N receiver
chiplets therefore decodes the majority bit directly from the received
symbol, and each has the bundled query in hand after one broadcast. It then
searches its own K prototypes.

This repository holds SystemVerilog for the digital part of that system:
transmitter and receiver datapaths and the IMC search engine. It also holds
a behavioural model of the analog path, used only in the testbenches. The
architecture, the sizes (D = 512, M = 3, N = 64, K = 64), the 8-phase set and
the optimised phases come from the WHYPE paper (Guirado et al.). Framing,
timing, widths, the permutation and the search sequencing are this
implementation's own choices. They are marked below and in each file's
header.

## One bundling round

```
 encoder m ──D bits──► hv_permute ─► tx_serializer ─► tx_source_coder ─► phase code ─► [RF: phase shifter, PA, antenna]
 (rho^m if permuted)                  1 bit / cycle    bit -> phase                               │
                                                                                 in-package channel: sum over m
                                                                                                  │
 [RF: antenna, LNA, IQ demod, ADC] ─► I/Q ─► ota_decoder ─► rx_deserializer ─► search_engine ─► (tx, class, score)
                                             nearest       D bits -> Q          imc_crossbar + wta
                                             centroid                           (rho^-m per search)
```

`whype_top` holds M transmitter chains (`g_tx[m]`) and N receiver chains
(`g_rx[n]`). The RF circuits and the channel are analog and lie outside it.
Its `tx_phase_o`/`tx_on_o` outputs drive the phase shifters and power
amplifiers. Its `rx_iq_i`/`rx_iq_valid_i` inputs come from the receivers'
data converters.

A round is started by one pulse on `start_i`, accepted while `ready_o` is
high. The paper assumes all chiplets share a synchronized clock, so the same
pulse loads every transmitter's serializer and re-aligns every receiver's
deserializer. The clock is the symbol clock: one bit per cycle, 10 GHz for
the paper's 10 Gb/s link. Cycle by cycle:

| cycle after accepted `start_i` | event |
|---|---|
| 0 | serializers load `query_i` (after the optional permutation); `permuted_i` is sampled |
| 2 … D+1 | `tx_on_o` high; `tx_phase_o` carries one phase code per bit, bit 0 first |
| + channel latency | receivers get one I/Q sample per cycle |
| last sample + 2 | `rx_hv_valid_o` pulse; `rx_hv_o` holds the decoded bundled query |
| then + D/R + 3 | first search result (`res_valid_o`) |
| then every D/R + 2 | further results, permuted mode only (M results in all) |

With D = 512 and R = 64, a frame lasts 512 cycles (51.2 ns at 10 GHz) and all
searches for a frame finish within 31 cycles. The receivers therefore never
hold up the link.

## Phase source coding and the decision regions

This is the central mechanism. It is also the part where most of the physics
sits outside the RTL.

**Transmitter.** `tx_source_coder` maps each bit to a 3-bit phase code
`p`, meaning `p × 45°` (eight phases, as in the paper's search space). Each
transmitter has its own pair (`cfg_ph0_i`, `cfg_ph1_i`). The paper's
optimised set for three transmitters is:

| transmitter | phase for '0' | phase for '1' | codes |
|---|---|---|---|
| TX1 | 0° | 90° | 0 / 2 |
| TX2 | 315° | 135° | 7 / 3 |
| TX3 | 225° | 180° | 5 / 4 |

The two phases of a transmitter need not be 180° apart, so this is not plain
BPSK. The phases were chosen by an exhaustive search over electromagnetic
simulations of the package, together for all receivers. The search ran
offline, so the pair is a configuration input, not logic.

**Channel.** Receiver n observes `y_n = Σ_m h[n][m]·exp(j·φ_m)`, where
`h[n][m]` is the static channel from transmitter m to receiver n. With
M = 3 that gives 2³ = 8 constellation points per receiver. As an example,
take equal gains and zero channel phase with the phases above. The four
majority-1 points lie near 135° to 145°, with magnitudes 0.41, 1.0, 1.73 and
2.41. The majority-0 points lie at 180°, 270°, 305° and 315°. The two sets are
separable, but the weakest points (magnitude 0.41) lie close to the boundary.
These points are where over-the-air errors come from.

**Receiver.** The paper finds each receiver's two decision regions by
K-means with K = 2 on its constellation. Two K-means clusters are separated
by the perpendicular bisector of their centroids, so `ota_decoder` stores
the two centroids (`cfg_c0_i`, `cfg_c1_i`, 8-bit I/Q each) and outputs 1 when
the sample is strictly nearer to the majority-1 centroid. It compares
squared Euclidean distances in 19-bit arithmetic; a tie gives 0. The
centroids, like the phases, are computed offline per receiver.

The decoder cannot correct a receiver whose channel puts a constellation
point on the wrong side. The paper reports per-receiver error rates from
below 1e-5 to about 0.1, with a mean below 0.01. HDC classification
tolerates such rates. The paper reports accuracy above 99% up to a bit error
rate of 0.26 in its few-shot task.

## Permuted bundling

The majority of similar, non-orthogonal queries is hard to classify. It also
loses which transmitter a class came from. With `permuted_i = 1`,
transmitter m therefore sends `rho^m(q_m)`. Here `rho` is a cyclic rotation
by one bit towards the MSB (`hv_permute`; the paper does not say which
permutation is used). Each receiver then runs M searches. Search m is on
`rho^-m(Q)` and is reported with `res_tx_o = m`. The class found in search m
is the best match for transmitter m's query. In baseline mode
(`permuted_i = 0`) one search runs on Q and is reported as transmitter 0.
The mode is sampled at `start_i` and applies to the whole round.

## The search engine (digital stand-in for the IMC core)

In the paper each receiver chiplet carries a phase-change-memory crossbar
(512 × 64, 8T4R cells) with pulse-width-modulated word-line drivers, a
current-controlled-oscillator ADC per column and a winner-take-all stage.
The query drives the word lines. Each column current is the dot product of
the query with that column's prototype. The column with the largest current
wins.

`imc_crossbar` computes the same dot products exactly in digital logic:
`sim_k = popcount(Q & P_k)`, 10 bits wide. It evaluates R word lines per
cycle, so a search takes D/R + 1 cycles (9 at the default R = 64). The whole
design runs on the symbol clock, so at 10 GHz that is 0.9 ns. The analog
core the paper builds on needs 10 to 128 ns per search, which is up to 2.5
frame times. A real analog core would therefore need the query double-buffered
or the searches pipelined across frames. That is not built here. `wta` picks the largest `sim_k`; a
tie goes to the lowest index. `search_engine` latches the query, sequences
the one or M searches, and flags `overrun_o` if a query arrives during a
search. Prototypes are written one column per cycle through `pw_en_i`,
`pw_engine_i`, `pw_class_i` and `pw_data_i`. Analog non-idealities of the
crossbar (conductance drift, IR drop, ADC quantisation) are not modelled.

## Files

| file | role |
|---|---|
| `rtl/whype_pkg.sv` | default sizes, `phase_t`, `iq_t`, `bundle_mode_e` |
| `rtl/hv_permute.sv` | `rho^a` and `rho^-a`, combinational |
| `rtl/tx_serializer.sv` | D-bit load, 1 bit per cycle out, bit 0 first |
| `rtl/tx_source_coder.sv` | bit → phase code, transmit enable; 1 cycle |
| `rtl/ota_decoder.sv` | nearest-centroid majority decision; 1 cycle |
| `rtl/rx_deserializer.sv` | D bits → bundled query, sync-aligned |
| `rtl/imc_crossbar.sv` | K × D prototype store and dot products |
| `rtl/wta.sv` | argmax over K similarities |
| `rtl/search_engine.sv` | one receiver's search sequencing (baseline / permuted) |
| `rtl/whype_top.sv` | M transmitter chains, N receiver chains |
| `tb/ota_channel_model.sv` | behavioural analog path, testbench only |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_whype_top` |
| `tb/tb_whype_fewshot.sv`, `tb/tb_whype_continual.sv` | classification workloads on synthetic data |

Parameters (all modules take the same names): `D` hypervector bits (512),
`M` transmitters (3), `N` receivers (64), `K` classes per receiver (64), `R`
word lines per crossbar cycle (64; D must be a multiple of R). The I/Q width
(`IQ_W` = 8) and phase-code width (`PH_W` = 3) are package constants.

## The analog path model

`tb/ota_channel_model.sv` stands in for everything between `tx_phase_o` and
`rx_iq_i`: phase shifters, PAs, antennas, propagation, LNAs, I/Q demodulators
and data converters. The paper's channel coefficients come from a
full-wave simulation of the package and are not published. The model draws
its own coefficients: per receiver a random common rotation, per link a gain
in [0.95, 1.05] and a phase error in [-3°, 3°]. It scales to 24 LSB per unit
amplitude, adds approximately Gaussian noise of settable deviation, and
rounds to 8-bit I/Q. With these draws a few of the 64 receivers get a
constellation that the two regions cannot fully separate even without noise.
This is the same error floor the paper shows per receiver. The end-to-end
test recognises those receivers and checks exact majority only on the
others.

## Verification

Every testbench checks the module's outputs against values computed
independently in the testbench, and prints `TB_RESULT checks=<n>
failures=<n>`. Where a latency is defined, the cycle count is checked too.

- `tb_hv_permute`: bit-level reference of `rho^a` and `rho^-a`, plus round trip.
- `tb_tx_serializer`: bit order, exactly D valid cycles, load ignored while busy.
- `tb_tx_source_coder`: the paper's phase set and random pairs, one-cycle latency.
- `tb_ota_decoder`: integer nearest-centroid reference, including exact ties.
- `tb_rx_deserializer`: random valid gaps, single pulse, sync discards a partial frame.
- `tb_imc_crossbar`: all 64 columns against popcount, D/R + 1 latency.
- `tb_wta`: random, tied and all-zero inputs.
- `tb_search_engine`: baseline and permuted bundles of three stored
  prototypes; class, score, transmitter tag and cycle counts; the bundled
  classes are recovered; overrun.
- `tb_whype_top`: the whole design at its default size (D = 512, M = 3,
  N = 64, K = 64). It programs all 4096 prototypes and the paper's phases,
  derives the centroids from the model, and runs six rounds alternating
  baseline and permuted bundling, two without noise and four with noise. It
  checks transmitter timing, every receiver's decoded frame against the
  decisions on the sampled I/Q stream, the exact majority in noise-free
  rounds, and every search result. It also counts that each mechanism
  occurred: both bundling modes, over-the-air errors under noise, error-free
  clean rounds, and transmitter identification. The noisy rounds show bit
  error rates of a few percent with the model's settings. The test simulates
  in well under a second.
- `tb_whype_fewshot`: a few-shot classification run at the default size.
  100 classes × 20 support examples are stored in 2000 columns, and 100
  rounds bundle three queries each. Every class has a random base vector;
  support examples and queries flip 15% of its bits. Every receiver result
  is checked against a recomputed search. The host picks, per search, the
  best column over all receivers; this step is testbench logic. One run
  gave: permuted bundling 73/75 correct without noise and 62/75 with noise;
  the baseline's single search named one of the bundled classes in 50/50
  rounds. Permuted accuracy below 90% without noise fails the test.
- `tb_whype_continual`: the same, grown in stages. It starts with 64
  classes and adds 64 per stage up to 600 classes × 5 examples (3000
  columns), writing new columns between rounds. Accuracy is printed per
  stage. Random class vectors are nearly orthogonal, so accuracy does not
  fall with class count the way it would for similar real classes.

To run one with plain Verilator from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_whype_top \
    rtl/whype_pkg.sv tb/tb_whype_top.sv --Mdir obj_top
./obj_top/Vtb_whype_top
```

Other modules are found through `-Irtl -Itb` by file name. Replace
`tb_whype_top` with any other `tb_*` to run that test.

## What is not here, and how far to trust it

- **Analog and RF blocks.** The NRZ driver, PLLs, mixers, phase shifters,
  PAs, antennas, LNAs, I/Q demodulators and data converters have no RTL.
  The top exposes their digital interfaces. The data-converter resolution
  (8 bits) is assumed.
- **Encoders.** These are application-specific and outside the design. The
  testbenches use stored prototypes with random bit flips as queries.
- **Phase and centroid search.** The exhaustive phase search and the K-means
  clustering are offline procedures. The RTL takes their results as
  configuration. Phase sets for M > 3 are not given in the paper, so
  configurations with 5 to 11 bundled queries, which the paper evaluates in
  its accuracy tables, cannot be set up from the published numbers even
  though `M` is a parameter.
- **IMC core.** This is a digital equivalent of an analog crossbar. It
  computes ideal dot products, and its latency and area say nothing about
  the PCM macro.
- **Implementation choices not from the paper.** One symbol per clock,
  LSB-first framing with a shared start pulse, cyclic-rotation permutation,
  tie rules, the search-per-transmitter scheme for permuted bundling, and
  the register stages in each block.
- The wired baseline (central majority chiplet, routers, serial links) is
  the paper's point of comparison and is not implemented.
