# GarNet on an FPGA: a distance-weighted graph network in streaming RTL

A particle hitting an imaging calorimeter leaves a cluster of up to 128 hits,
each described by four numbers (x, y, z relative to the seed cell, and
energy). This RTL decides, within a fixed budget of well under a microsecond,
whether the particle was an electron or a pion and estimates its energy. It
does so with a graph neural network that needs no edge list: every hit talks
to a handful of learned *aggregators*, and the strength of each connection is
a learned function of the hit's own features. The graph is therefore built on
the fly, and the data flow is fixed when the hardware is built. That is what
makes a graph network fit a trigger's hard latency limit.

The design follows the simplified GarNet layer and the network described in
"Distance-Weighted Graph Neural Networks on FPGAs for Real-Time Particle
Reconstruction in High Energy Physics" (Iiyama et al., 2020), in its quantized
configuration with V_max = 128 hits and reuse factor R_reuse = 32. That
publication describes an HLS implementation. This is an independent
register-transfer description of the same algorithm. Where the publication
leaves a detail open, the choice made here is stated below and in each
file's header.

## 1. The algorithm in one page

One GarNet layer maps V vertices with F_in features to the same V vertices
with F_out features. Three steps:

1. **Distance.** For every vertex v and aggregator a (a < S), a linear map of
   the vertex features gives a distance
   `d_av = sum_j alpha_aj g_jv + beta_a`. Its potential
   `W_av = exp(-d_av^2)` is the edge weight between the two.
2. **Gather.** Each aggregator averages the vertex features weighted by W:
   `G_ja = (1/V_max) sum_v W_av g_jv` and `L_a = (1/V_max) sum_v W_av`.
   The division is by the fixed V_max, not by V, so the number of hits is
   itself information.
3. **Scatter and decode.** Each vertex receives the aggregator information
   back with the same weights. A linear decoder then produces
   `g'_kv = sum_a W_av H_ka + c_k`, with `H_ka = sum_j wt_kja G_ja + bt_ka L_a`.

The original layer has a linear *encoder* f = w g + b before the gather and a
decoder u after it. Both are linear, and so is the mean, so the two weight
sets fold into one: `wt = u.w` and `bt = u.b`. With ternary encoder and decoder
weights (-1, 0, +1), wt and bt are small integers, and step 3 needs only
additions and shifts. This is the "quantized" model. Its encoder dimension
F_LR survives only in the size of these integers; no F_LR-wide datapath exists.

Everything that depends on a sample is contained in W_av, G and L. Once those
are known, the next sample may enter, so the gather step sets the throughput.

The network is:

| stage | configuration |
|---|---|
| GarNet 1 | S = 4, F_LR = 8, F_out = 8 (input: 4 features per hit) |
| GarNet 2 | S = 4, F_LR = 8, F_out = 8 |
| GarNet 3 | S = 8, F_LR = 16, F_out = 16 |
| mean | average of the 16 features over the V hits |
| dense | 16 nodes, ReLU; then 8 nodes, ReLU |
| heads | 1 node + sigmoid: electron probability; 1 node linear: energy |

## 2. How a layer is built (`garnet_layer`)

Processing all 128 vertices at once would take 128 copies of the per-vertex
logic. Instead, `LANES = VMAX / REUSE = 4` copies (`garnet_vertex_unit`) each
handle 32 vertices in turn, one per clock. Vertices therefore travel as
*beats* of four: beat b carries vertices 4b .. 4b+3.

```
 input beats ──► 4 × vertex unit ──► accumulator (G, L) ──► bank regs G,L,V ─┐
 (4 vertices)    d = αg+β, W=exp(-d²),     sum over lanes                       │
                 W·g          │            and beats, /VMAX                     ▼
                              └─► W_av ──► weight buffer ──► 4 × output unit ─► output beats
                                          (2 banks)          y = Σ W·H + c
                                                    ▲
                                   agg transform: H = wt·G + bt·L (once per sample)
```

**Input phase.** Each vertex unit has three pipeline stages. Stage 1 is the
multiply-accumulate for d, saturated to 12 bits (s3.8). Stage 2 is a lookup
of W in a 4,096-entry table (`garnet_exp_lut`), addressed by the raw 12 bits
of d. Stage 3 forms the products W·g. The accumulator adds the four lanes and
the running sums. Lanes at or beyond V are masked out. The W values of each
beat go, masked, into one word of the weight buffer. The serial loop stops
after ceil(V/4) beats, so a small cluster finishes early. For a full cluster
the accumulators close REUSE + 3 = 35 clocks after the first beat. In the
publication's formula T_W = T0_W + R_reuse, T0_W is about 20 clocks in the
HLS build; it is 3 here.

**Two banks.** The weight buffer and the G/L registers exist twice. The
input phase fills one bank while the output phase empties the other. This is
how the next sample can enter as soon as W, G and L of the previous one are
complete. Each bank is FREE, FILLING or FULL. `in_ready` is high when no
sample is open and the next bank to be written is FREE.

**Output phase.** When the read bank is FULL and the next stage is ready,
`garnet_agg_transform` computes all S×F_out values of H in one clock. Then the
buffer is read back one word per clock. Four `garnet_output_unit`s each turn
one vertex's S potentials into F_out outputs. The first output beat leaves 2
clocks after the first read. After a sample, the phase waits 2 more clocks
before it looks at the downstream ready again: by then that ready reflects
the sample just sent.

**Chaining.** Layer n's output stream is layer n+1's input stream, so layer
n+1 gathers a sample while layer n is still scattering it. The flow control
works per sample, not per beat. A layer starts to emit only when the next
layer can take a whole sample, and after that it never has to stall in the
middle of one.

## 3. Stream and configuration interfaces

Between layers, into the top and into `vertex_mean`, a sample is a sequence of
beats:

| signal | meaning |
|---|---|
| `valid` | beat present |
| `first`, `last` | first and last beat of the sample (both high for a one-beat sample) |
| `nvtx` | V, number of valid vertices (0 .. VMAX), valid with every beat |
| `feat[LANES][F]` | features of vertices 4b+l; lanes with 4b+l >= V are ignored |

A sample has ceil(V/4) beats, and at least one. A source may begin a sample
(`valid && first`) only while `in_ready` is high. After that, beats may come
on any clock; gaps are allowed. Immediate assertions in `garnet_layer` catch
a sample started while not ready, a beat outside a sample, and too many
beats.

All weights are registers loaded through one write-only bus, `cfg_we`,
`cfg_addr[15:0]` and `cfg_data[15:0]`, one word per clock:

| base | block | layout (word offsets) |
|---|---|---|
| 0x0000 | GarNet 1 | α[a][j] at a·F_in+j; β[a]; wt[a][k][j]; bt[a][k]; c[k] (in this order, each packed) |
| 0x0400 | GarNet 2 | same |
| 0x0800 | GarNet 3 | same (1,240 words) |
| 0x1000 | dense 16 | W[o][i] at o·16+i, then b[o] |
| 0x1200 | dense 8 | same |
| 0x1300 | classifier | 8 weights, bias |
| 0x1310 | regressor | 8 weights, bias |

α, β, c and the dense weights are s7.8. wt and bt use the low 8 bits as a
signed integer. The weight registers are not reset, so load every word before
the first cluster.

## 4. Number formats

All values are two's-complement fixed point. All right shifts round toward
minus infinity. Every narrowing saturates.

| quantity | format | note |
|---|---|---|
| hit and vertex features, dense activations | s7.8, 16 bit | |
| α, β, c, dense weights | s7.8 | the distance network is not quantized |
| d_av | s3.8, 12 bit | range ±8; saturates |
| W_av | u1.17, 18 bit | exp(-d²) rounded; 0 beyond \|d\| ≈ 3.5 |
| G, L | s15.16, 32 bit | |
| H | s19.12, 32 bit | |
| wt, bt | signed 8-bit integers | `TW_FRAC` > 0 makes them fixed point |
| mean | (Σ y) · round(2^16/V) >> 16 | reciprocal table of VMAX+1 entries |
| probability | u0.16 | sigmoid table, 1,024 entries over [-8, 8) |

The table contents are formulas, computed during elaboration:
`W[i] = round(2^17 · exp(-(signed12(i)/256)^2))`,
`p[i] = min(65535, round(2^16 / (1 + exp(-(i-512)/64))))`.

## 5. Timing

At the default size (VMAX = 128, REUSE = 32), the end-to-end testbench
measures:

* **latency** for a full cluster: 157 clocks from the first input beat to
  `out_valid` (785 ns at 200 MHz);
* **interval** between full clusters sent back to back: 36 clocks in steady
  state (one every 180 ns). Each layer's input phase takes ceil(V/4) beats,
  and its output phase ceil(V/4) reads plus a few clocks of phase change; with
  two banks the two phases overlap, so the slower of them, plus the handshake
  clocks between samples, sets the interval. The first two clusters enter
  33 clocks apart, because both banks start out free.

For comparison, the publication reports 148 clocks of latency and an interval
of 50 clocks for its HLS build of the same quantized network. Smaller clusters
finish earlier in both phases.

Roughly, each GarNet layer adds its 32 output reads plus about 8 clocks of
phase change and pipeline, on top of the 32 input beats of the first layer.
The mean, dense layers and sigmoid add 6 clocks.

## 6. Where this differs from the published design

* **Weights are loaded at run time.** The publication contracts the encoder
  and decoder weights at synthesis time and compiles them into the logic.
  The trained values are not part of the publication, so here they are
  registers. Constant-folding them away would give the smaller, LUT-only
  multipliers the publication describes.
* **Vertex-unit depth.** The vertex unit here has 3 stages, against about 20
  clocks in the HLS build. The totals in section 5 follow from that.
* **Streaming input.** The HLS function takes the whole 128×4 array. Here,
  hits arrive four per clock.
* **Formats, rounding, the reciprocal-based mean and the sigmoid table** are
  this design's choices; the publication gives only the 12-bit distance and
  the 4,096-entry exp table.
* **Not included:** the upstream clustering that selects the hits of a
  cluster, and the tenfold time-multiplexing that the publication says a
  real trigger would need. Both are outside the network.

## 7. Files

Each `rtl/` file holds one unit, and its header describes interface and
timing.

| file | unit |
|---|---|
| `garnet_pkg.sv` | formats, types, saturation helpers |
| `cfg_regfile.sv` | weight registers on the configuration bus |
| `garnet_exp_lut.sv` | exp(-d²) table |
| `garnet_vertex_unit.sv` | distance, potential, W·g for one vertex per clock |
| `garnet_accumulator.sv` | G, L over lanes and beats |
| `garnet_weight_buffer.sv` | two-bank W_av store |
| `garnet_agg_transform.sv` | H = wt·G + bt·L |
| `garnet_output_unit.sv` | g' = Σ W·H + c for one vertex |
| `garnet_layer.sv` | one GarNet layer with its control |
| `vertex_mean.sv` | average over the V vertices |
| `dense_layer.sv` | fully connected layer, ReLU or linear |
| `sigmoid_lut.sv` | sigmoid table |
| `garnet_model.sv` | the whole network (top) |

## 8. Simulation

Each unit has a self-checking testbench `tb/tb_<unit>.sv`. It compares
against `tb/garnet_ref_pkg.sv`, an integer model of every formula above,
written independently of the RTL, and it prints
`TB_RESULT checks=N failures=M`. `tb_garnet_model` runs the full-size network
on ten clusters (full, partial, one hit, no hits) with random weights. It
checks every output bit for bit, checks latency ≤ 200 clocks and interval ≤ 50
clocks, and requires that early loop termination, phase overlap, input stalls
and a held sample all occurred. `tb_garnet_layer` checks one layer at reduced
size, including the input-phase time of REUSE + 3 clocks.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_garnet_model \
  rtl/garnet_pkg.sv tb/garnet_ref_pkg.sv rtl/*.sv tb/tb_garnet_model.sv
./obj_dir/Vtb_garnet_model
```

Replace the testbench name to run another one. The network in the testbench
uses random weights, so the outputs check the arithmetic, not the physics.
