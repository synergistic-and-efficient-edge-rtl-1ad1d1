# Seeker sensor node: RTL of the edge side

A battery-free sensor node lives on harvested energy. The energy arrives in small,
irregular amounts, so the node cannot always classify its sensor data itself. Sending the
raw data to a host costs more radio energy than most of the local work. The design here
is the digital part of such a node for human-activity recognition (HAR). It is built on
the Seeker system ("Synergistic and Efficient Edge-Host Communication for Energy
Harvesting Wireless Sensor Networks"). For every window of sensor data the node picks the
most useful thing it can afford:

| decision | what the node does | energy budget (default) |
|---|---|---|
| **D0** memo | the window correlates (r >= 0.95) with a stored trace of a known activity: send that label | none checked |
| **D1** | run the 16-bit DNN crossbar, send its label | 37.5 uJ |
| **D2** | run the 12-bit DNN crossbar, send its label | 24.85 uJ |
| **D3** | build a *clustering coreset* of each channel and send it (42 bytes for 12 clusters) | 17.04 uJ for 12 clusters |
| **D4** | build an *importance-sampling coreset* (20 samples) of each channel and send it | 16.84 uJ |
| drop | nothing fits: skip the window | |

A *coreset* is a small summary of the data from which the host can still classify. The
clustering coreset stores, for each cluster, its centre, its radius and how many samples
it holds. With the count, the host can rebuild a window of the right size by spreading
that many points inside each circle. The importance-sampling coreset keeps 20 actual
samples, chosen to be both distinctive and spread out. A generator network on the host
fills in the rest. An **activity-aware** rule (AAC) lets the node send fewer clusters when
energy is short. It predicts the current activity from the last label the node computed
itself, because people keep doing the same thing for seconds at a time. A per-activity
table says whether fewer clusters would cost too much accuracy for that activity.

The DNN crossbars, the radio, the harvester and storage, and the sensor are outside this
RTL. The top level `seeker_node` brings their signals out as ports (see *Boundary of the
design*).

## Data path at a glance

```
 s_valid/s_data ──► window_buffer (60 x 3 x 32 bit, hop 30) ──win_ready──► decision_controller
                          │  one shared read port                              │  start/done pulses
       ┌──────────────────┼─────────────────┬──────────────┐                   │
       ▼                  ▼                 ▼              ▼                   │
 correlation_engine  kmeans_coreset   impsamp_coreset   dnn_rd_* (to crossbars)│
       ▲                  │                 │                                  │
 ground_truth_store       └──────┬──────────┘                                  │
 (12 traces)                     ▼                                             │
                          payload_packer ──► tx_valid/tx_data/tx_last (radio) ◄┘
 h_valid/h_energy, stored_energy ──► power_predictor ──pred_energy──► aac_selector ──k──►
```

All blocks run on one clock with an asynchronous active-low reset. Start and done are
single-cycle pulses. Only one engine works at a time. The window buffer's single read port
is granted in this order: correlation, clustering, importance sampling, and, when none of
them is busy, the external DNN port.

## Per-window flow (`decision_controller`)

1. `win_ready` pulses after the 60th sample, and then after every 30 more (windows overlap
   by half).
2. The correlation engine compares the window with every stored trace, in label order, and
   stops at the first one with r >= 0.95. On a match the node sends a 2-byte result packet
   holding that label (D0). Nothing else runs.
3. Otherwise the predicted energy `pred_energy` is sampled once. If it covers D1, the
   controller requests a 16-bit inference (`dnn_req`, `dnn_sel = 0`). Else, if it covers
   D2, it requests a 12-bit inference (`dnn_sel = 1`). The returned label is sent as a
   result packet. It also becomes the activity prediction used by the AAC rule.
4. Otherwise, if the AAC selector offers a cluster count k > 0, the clustering engine and
   the packer run once per channel: three cluster packets (D3).
5. Otherwise, if the energy covers D4, the same happens with importance sampling (D4).
6. Otherwise the window is dropped.

`decision_valid` pulses with the decision once all of the window's packets have left.
A window that becomes ready while the controller is still busy is skipped, and
`win_missed` pulses. At the sample rate of the target data (50 Hz, a window every 0.6 s)
the longest flow takes a few thousand clock cycles, so this only happens at very low
clock rates.

## Memoisation: correlation without division

The correlation engine streams the 180 cells of the window (60 samples x 3 channels,
pooled) and of one trace, one pair per clock. It accumulates Σx, Σy, Σx², Σy² and Σxy in
exact wide integers. With n = 180 it forms

    num = n·Σxy − Σx·Σy,  dx = n·Σx² − (Σx)²,  dy = n·Σy² − (Σy)²

and declares a match when `num > 0` and `num² · 2^32 >= TH² · dx · dy`. Here TH is the
threshold in unsigned Q0.16: 62259, which is 0.95. This is the exact comparison
r >= TH, with no square root or division. A constant window or trace (dx or dy = 0)
never matches. Each trace takes 181 cycles. A match on trace a is reported
(a+1)·181+1 cycles after `start`, and a miss on all 12 traces after 2173 cycles.

## Energy prediction and activity-aware clustering

`power_predictor` keeps the last 8 harvest readings (`h_energy`, nJ per harvest period)
and predicts

    pred_energy = stored_energy + 4 · mean(last 8 readings)

with saturation. The energies of the decision table are compared against this value.

`aac_selector` holds:
- `cost[i]`: energy of a coreset with 12, 10, 8 or 6 clusters. The reset value is 17.04 uJ
  scaled by k/12.
- `loss[activity][i]`: accuracy loss in 0.1 % steps. The reset value is 0xFF, which is
  never accepted.
- `max_loss`: the largest loss accepted. The reset value is 20 (2 %).

It returns the largest k whose cost fits `pred_energy`. 12 clusters needs only the
energy. A smaller k also needs an activity prediction, and that activity's loss entry
must be within `max_loss`. All entries can be written at run time through `aac_cfg_*`.
So the host can, for instance, load the table it measured.

## Clustering coreset engine (`kmeans_coreset`)

Each sample of one channel becomes a 2-D point (t, v):
- t is its index in the window, 0..59;
- v is the sample quantised to a signed byte (`x >>> 8`, saturated).

The engine runs k-means with k <= 12 centres, all updated in parallel:

- **Init**: centre j starts at t = (2j+1)·60/(2k), with the value of the sample there
  (k cycles).
- **Pass**: one point per clock. Every centre computes its squared distance at once, and
  the point joins the nearest centre (ties go to the lower index). Per cluster, the engine
  keeps only Σt, Σv, the count and the largest squared distance, never the points.
- **Update**: one cluster per clock. The engine reports the centre used in the pass, the
  radius (the ceiling square root of the largest squared distance, saturated to 255) and
  the count (saturated to 15, to fit 4 bits). It then moves the centre to the rounded mean
  of its members.
- The engine stops when no centre moves, or after 4 updates. One last pass then measures
  the final radii and counts.

Because the radius is a rounded-up square root of the largest member distance, every
sample lies inside the circle of its reported cluster. The end-to-end test checks this on
the transmitted packets. Latency: k + passes·(60 + k) + 1 cycles, at most 373 for k = 12.
Clusters that end up empty are reported with count 0.

## Importance-sampling engine (`impsamp_coreset`)

1. **Load**: the engine loads the 60 quantised samples of one channel.
2. **Score**: the score of each sample is its distance from the window mean, |v − mean|.
3. **Select**: up to 7 passes follow, with a threshold T that halves each pass, starting
   at the largest power of two not above the highest score. A free sample with no
   selected neighbour is accepted when `score + (lfsr & (T−1)) >= T`:
   - certainly when its score is at least T;
   - otherwise with probability score/T.

   The random bits come from a 16-bit LFSR. The first pass uses no random bits, so it
   takes only the strongest samples. Without this, weak samples picked by chance early in
   the window could use up the budget before a strong sample later in the window is
   reached. The last pass accepts any free sample with free neighbours. Selection stops
   at 20 samples.
4. **Emit**: the chosen samples are output as (t, v) pairs in time order. No two are
   adjacent.

Latency is at most about 600 cycles.

## Radio packets (`payload_packer`)

| byte | content |
|---|---|
| 0 | `{kind[1:0], decision[2:0], channel[1:0], 0}`; kind 0 = result, 1 = clusters, 2 = samples |
| 1 | result: label; clusters: k; samples: number n |
| 2.. | clusters: k records of 28 bits `{t[7:0], v[7:0], r[7:0], n[3:0]}`, packed MSB first, ceil(3.5k) bytes (42 for k = 12); samples: n pairs `{t, v}` (40 bytes for 20) |

Bytes leave on a valid/ready stream. `tx_last` marks the final byte, and a stalled
`tx_ready` holds the byte, which an assertion checks.

## Boundary of the design

| port group | connects to |
|---|---|
| `s_valid`, `s_data[3][32]` | sensor (IMU), one 3-channel sample per pulse |
| `h_valid`, `h_energy`, `stored_energy` | harvester and storage monitor, in nJ |
| `gt_*` | loading of the 12 ground-truth traces (60 x 3 cells each) |
| `aac_cfg_*` | AAC table: 0 = loss entry, 1 = cost entry, 2 = max_loss |
| `dnn_req`, `dnn_sel`, `dnn_done`, `dnn_class`, `dnn_rd_*` | the two ReRAM DNN crossbars; they read the window through `dnn_rd_*` |
| `tx_*` | radio |
| `decision_valid`, `decision`, `win_missed`, `pred_energy`, `cluster_k` | status |

The DNN crossbars are analog ReRAM arrays whose networks are not given here. The radio,
harvester, storage and sensor are bought-in or analog parts. The host side (cluster
recovery, the GAN that fills in importance samples, host inference and the ensemble of
several sensors) is software on a phone. None of these are in this RTL. At the default
sizes the node synthesises to about 1400 cells plus 3.5 k flip-flop bits. It also has
74 880 bits of register-array storage: 69 120 for the traces and 5 760 for the window.

## Where this design departs from the source description, or fills gaps

- **Sample format.** The buffer's cells are 32-bit two's-complement fixed point, not
  32-bit floats. The node only adds, multiplies and compares samples.
- **Which traces are correlated.** The decision flow chart compares the current window
  with the *last* window. The text stores one ground-truth trace per activity. This design
  follows the text, and a match sends the label of the matching trace.
- **Coreset per channel.** The 42-byte figure matches 12 clusters of one 60-sample
  channel (raw size 240 bytes), while the buffer holds 3 channels. Each channel is
  therefore coded separately: three packets per window.
- **Points and metric.** Clustering uses 2-D points (time, 8-bit value) and Euclidean
  distance. The source does not fix either.
- **Importance measure.** The source describes importance as distinctiveness, loosely tied
  to frequency content. Here it is the distance from the window mean, with no frequency
  transform.
- **Count field.** The count is 4 bits and saturates at 15. The source says clusters never
  exceed 16 points, and 16 itself does not fit.
- **Cluster options.** AAC offers 12, 10, 8 and 6 clusters. 15 is not offered, because
  more than 12 clusters did not help.
- **Precision choice.** When both DNN precisions fit, the 16-bit one is chosen.
- **Controller.** The decision logic is drawn as part of a microcontroller in the source.
  Here it is a state machine.
- **Own choices.** Predictor length and horizon, table encodings, packet header, initial
  centres, LFSR and the skipping of windows that arrive while busy are all this design's
  own.
- **Data sets.** The default sizes hold the MHEALTH HAR set: 12 activities, 60 x 3 windows,
  12 clusters, 20 samples. PAMAP2 has more activity labels than the 12 stored traces. The
  bearing-fault data needs 15–20 clusters. Both need larger parameters (`N_ACT`, `K_MAX`
  in `seeker_pkg`). The coreset engines themselves are tested at bearing sizes. Windows
  are limited to 256 samples by the 8-bit time index.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog.

| testbench | reference it compares against |
|---|---|
| `tb_window_buffer` | pulse positions and full window contents after every hop |
| `tb_ground_truth_store` | every cell written and read back |
| `tb_correlation_engine` | floating-point Pearson coefficient for random, threshold-edge and full-range data; exact latency |
| `tb_power_predictor` | moving-average model, saturation |
| `tb_aac_selector` | model of the selection rule over random tables and energies |
| `tb_kmeans_coreset` | an independent k-means model, radius coverage, counts, latency, k = 12/10/8/6/3 |
| `tb_impsamp_coreset` | bit-exact model including the LFSR, plus spacing, ordering and value properties |
| `tb_payload_packer` | byte-exact expected streams under random back-pressure |
| `tb_decision_controller` | scripted engine responders over every energy boundary |
| `tb_seeker_node` | end to end at the default sizes, with no parameter overrides |
| `tb_bearing_coreset` | both coreset engines at bearing-fault sizes (240-sample window, k = 15 and 20, 40 samples) on synthetic vibration data with fault impacts |
| `tb_har_energy_sources` | a 48-window HAR-style stream under steady, bursty and weak harvesting, with an energy store charged per decision |

`tb_seeker_node` loads 12 sinusoidal activity traces and an AAC table, then streams
samples block by block. A behavioural DNN in the testbench reads the window through
`dnn_rd_*` and answers with a label. Energies are set so that the windows go through D0,
D1, D2, D3 with 12 clusters, D3 with 10 clusters (AAC), D4 and drop. A final burst of fast
samples forces skipped windows.

Every packet is parsed:
- headers and labels;
- cluster counts and packet lengths;
- every sample lies inside a transmitted cluster circle;
- every importance sample equals the quantised window sample at its time index.

The expected decision is computed in the testbench from floating-point correlations and
the energy model. Each mechanism is counted, and one that never happens is a failure. The
run is about 1.4 M clock cycles and takes seconds.

`tb_har_energy_sources` shows the node adapting to its energy supply.
- With a steady source it mostly classifies locally or sends 12-cluster coresets.
- With a bursty, RF-like source it mixes all decisions and drops windows during droughts.
- With a weak source it drops most windows.

Each decision is checked against the same independent model. The data are synthetic
stand-ins for HAR recordings: sinusoidal activity signatures with noise.

## Simulating

Verilator 5 with timing support:

```
verilator --binary --timing --assert -Irtl rtl/seeker_pkg.sv rtl/*.sv tb/tb_seeker_node.sv \
          --top-module tb_seeker_node -o sim
./obj_dir/sim
```

Replace the testbench file and top module to run another test. All shared sizes and
energies are in `rtl/seeker_pkg.sv`. Each block also takes them as parameters (`P_*`), so
a block can be tested at other sizes. Energies are in nJ.
