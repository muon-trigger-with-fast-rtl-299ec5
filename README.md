# Drift-tube muon trigger primitives with two small neural networks

This is synthesizable SystemVerilog for a local muon trigger on one *macro-cell* of a
drift-tube (DT) chamber. A macro-cell is a block of 4 staggered layers x 4 cells. From the raw
TDC hits of those 16 wires, the design finds a muon crossing and produces a *trigger
primitive*: the crossing time t0 at full TDC precision, the track slope, and the crossing
position in the middle of the macro-cell.

The hard part of DT triggering is combinatorics. A hit gives a drift time but not which side of
the wire the muon passed (its *laterality*). Noise adds hits that fit nothing. The absolute
crossing time is also unknown and has to be solved for. Here two small feed-forward networks
take that work. The first removes noise hits. The second assigns each remaining hit to left,
right or noise. After that exactly one analytic mean-timer relation applies, so t0 and the line
fit are computed directly, with no search over hypotheses. Every stage accepts a new set of
hits on every 40 MHz clock.

## Processing chain

```
 hit lanes ──► hit_grouping ──► filter_ann ──► layer_select ──► disamb_ann ──► meantimer ──► track_fit ──► trigger primitive
              30-clock window    16-20-16 net   ≤1 hit/layer     8-20-12 net    t0 (TDC)      m, x0
              dup. suppression   2 clocks       combinational    3 clocks       2 clocks      2 clocks
```

`tpg_macrocell` chains the blocks and brings out the result (`tp_o`/`tp_valid_o`). It also has
one write port for the network weights (`cfg_i`) and an 8-bit vector of one-clock event pulses
(`stat_o`) for monitoring.

Latency: when a hit has spent its 30 clocks in the window, the group goes out on the next
clock. A trigger primitive follows 9 clocks later, 39 clocks after the first hit of the group
arrived. The two networks take 5 of those 9 clocks.

### Geometry and units

* Layers are numbered 0..3 (A..D) from the bottom. Layers A and C are shifted half a cell
  towards +x.
* The channel index is `layer*4 + wire`.
* Times are `{bx, fine}`: a wrapping 12-bit bunch-crossing counter plus 0..29 fine counts. One
  count is 25 ns / 30 = 0.833 ns.
* Positions are in *drift units*. One unit is the distance electrons drift in one count at
  54 µm/ns, which is 45 µm.
* A 42 mm cell is therefore 2 x 467 units, and the maximum drift time is Tmax = 467 counts.
* Drift time and drift distance share one number, so no multiplier is needed to turn a time
  into a position.
* Wire `w` of layer `l` sits at `x = (2w + 1 + [l even]) * 467`.
* The layer pitch is 13 mm = 289 units. A slope `m` in units per layer gives the angle
  `phi = atan(m * 45 µm / 13 mm)`.

## Hit grouping (`hit_grouping`)

Hits reach the trigger out of time order, because the read-out multiplexes its TDCs onto a few
serial lanes. Grouping therefore works on *arrival* time:

* Each of the 16 channels has one slot holding the hit's time and an age counter.
* A hit stays for 30 clocks. That covers the ~16 BX maximum drift plus the multiplexing delay.
* A new hit on an occupied channel replaces the old one and restarts the age counter.
* When any hit reaches the end of its 30 clocks, the whole window goes downstream as a *group*:
  a 16-bit mask plus 16 times. The expiring hit then leaves the window.

Without more care, each hit of a muon would send the same hits again as it expired. Every slot
therefore carries a flag, "was in the last group sent". At an expiry, the window is suppressed
as a *duplicate* if every hit in it carries the flag, meaning it adds nothing to what was
already sent. A genuinely new hit in the window lets the next expiry send a fresh group.

Each lane carries one hit per clock. Hits outside this macro-cell (the `MC_CHAMBER` /
`MC_WIRE0` parameters) are ignored.

## The two networks (`qmlp`, `filter_ann`, `disamb_ann`)

Both networks are instances of one pipelined core, `qmlp`, with one hidden layer:

```
act[h]   = clip_0..255( (b1[h] + Σ_i w1[h][i]·x[i]) >>> 4 )      (ReLU, 8-bit)
logit[o] = b2[o] + Σ_h w2[o][h]·act[h]
```

* Weights are 6-bit signed numbers read with 4 fractional bits (−2 … +1.9375). Biases are 12
  bits.
* Each layer takes one clock, and a new vector is accepted every clock.
* Weights and biases are registers loaded at run time through the write port. A zero weight is
  a pruned connection.
* Address map in each network: `w1[h*N_IN+i]`, then `b1[h]`, then `w2[o*N_HID+h]`, then `b2[o]`.
* `cfg_i.sel` chooses the network: 0 = filter, 1 = disambiguation.

**Time code.** Both networks see only coarse BX times. Each present hit is coded as
`1 + BX − (earliest BX in the set)`, clipped to 31. An empty channel is 0. The code is the same
whenever the muon crosses, and in-time hits have small codes.

**Filtering**, 16 → 20 → 16. There is one input per channel. A channel is kept when its logit
is positive and it holds a hit. Latency is 2 clocks.

**Layer selection** (`layer_select`, combinational):

* A single muon crosses each layer once. Of the kept hits in a layer, the one on the lowest wire
  is taken.
* If fewer than three layers remain, the group is dropped, counted in `stat_o.filter_reject`.

**Disambiguation**, 8 → 20 → 12:

* Inputs are a (BX code, wire) pair per layer.
* Outputs are left, right and noise scores per layer. The largest score wins. Ties go to noise
  first, then to left.
* An empty layer is always noise.
* An input register in front of the network makes the latency 3 clocks.
* If fewer than three hits stay non-noise, there is no primitive (`stat_o.disamb_reject`).

No trained weights come with this design. They depend on the detector and on the simulation
used for training. Until a model is loaded every weight is zero, so nothing passes the filter.
The end-to-end testbench contains two small hand-built models that show the expected form:

* a pass-through filter;
* a disambiguation network that reads laterality off the wire offset between neighbouring
  layers. That is correct for near-vertical tracks.

A trained model is loaded the same way, one word per clock. A build with fixed weights would
let synthesis remove the zero weights, which the registered form cannot do.

## Time pedestal: the mean-timer (`meantimer`)

Once the laterality is known, a hit in layer `l` lies at

```
x_l = wire_x_l + s_l · (t_l − t0),     s_l = +1 right, −1 left
```

Three points on a straight line in layers a < b < c satisfy
`(c−b)·x_a − (c−a)·x_b + (b−a)·x_c = 0`. That equation is linear in t0:

```
t0 = N / D,   N = Σ k_l (wire_x_l + s_l t_l),   D = Σ k_l s_l,   k = (c−b, −(c−a), b−a)
```

This one formula covers the pattern-specific mean-timer equations. For cells 4-6-3 of a
staggered triplet, with the hits right/left/right, it reduces to the classic
`t0 = (t4 + 2·t6 + t3 − 2·Tmax) / 4`.

* **Quadruplets.** The A-B-C and B-C-D solutions are combined as
  `(sgn D1·N1 + sgn D2·N2) / (|D1| + |D2|)`.
* **Triplets.** The three used layers are taken directly.
* `D = 0` happens when the lateralities admit no crossing time. That is reported as "no
  solution" (`stat_o.mt_invalid`).

Arithmetic:

* Times are taken relative to the first used hit, so BX wrap-around is harmless.
* The division rounds to the nearest count.
* The result is accepted only if every drift time `t_l − t0` lies in `[−30, 467+30]` counts
  (`TOL`).
* Stage 1 forms N and D; stage 2 divides and checks; 2 clocks in all.

## Track fit (`track_fit`)

With t0 known, the hits become points `(z = l, x_l)`. A least-squares line is fitted:

```
den = n·Szz − Sz²            m  = (n·Szx − Sz·Sx) / den          (Q6, units/layer)
x0  = (Sx + m·(1.5·n − Sz)) / n    at z = 1.5, between layers B and C   (Q2, units)
```

Both values are computed from exact integer numerators with a single rounded division, so
rounding does not pile up. Latency is 2 clocks.

The primitive `tp_t` holds:

* t0
* m and x0
* the hit count (3 or 4)
* the layers used
* the laterality and wire of each layer

## Interface of `tpg_macrocell`

| port | dir | type | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | 40 MHz clock, one tick per BX; asynchronous active-low reset |
| `hit_i[N_LANES]` | in | `hit_t` | `{valid, chamber[2], layer[2], wire[4], bx[12], fine[5]}` per lane and clock |
| `cfg_i` | in | `ann_cfg_t` | `{we, sel, addr[11], data[12]}` weight write |
| `tp_valid_o`, `tp_o` | out | `tp_t` | trigger primitive |
| `stat_o` | out | `tpg_stat_t` | pulses: hit accepted, hit replaced, group sent, duplicate, filter reject, disambiguation reject, no t0 solution, primitive |

Parameters:

| parameter | default | meaning |
|---|---|---|
| `N_LANES` | 2 | input lanes |
| `MC_CHAMBER` | 0 | chamber served |
| `MC_WIRE0` | 0 | first wire served |
| `N_HID` | 20 | hidden neurons |
| `TOL` | 30 | drift-time tolerance in counts |

Shared types and constants are in `tpg_pkg`.

## What comes from the published design and what does not

Taken from it:

* the 4x4 staggered macro-cell
* 1/30-BX TDC times
* the 30-clock persistence, the expiry-driven grouping and the duplicate suppression
* a filtering network on BX times with 16 inputs, 20 hidden neurons and 16 outputs, in 2
  clocks
* a disambiguation network on (BX, wire) pairs with 20 hidden neurons and left/right/noise
  classes, in 3 clocks
* 6-bit weights
* the at-least-three-hits rule
* the mean-timer t0 at full TDC precision
* the least-squares slope and mid-plane position
* one set per clock throughout

Choices made here, where that description is silent:

* the hit word and the 12-bit BX counter
* one slot per channel, with replacement
* the BX time code fed to the networks
* the ReLU, fixed-point scaling and bias widths
* run-time loadable weights
* lowest wire wins inside a layer
* the network output coding and the tie rules
* the single general mean-timer formula, its quadruplet combination and tolerance window
* units, fixed-point formats and rounding of the fit
* the event pulses

Departures to be aware of:

* **Mean-timer.** The reference firmware uses a table of 19 pattern-specific equations, not
  reproduced here. The general formula above gives the same t0 for any straight track. It may
  differ from that firmware in which wrong-laterality cases it rejects.
* **Weights and size.** The reference networks were trained, pruned to 50–60 % sparsity and
  compiled with fixed weights into about 11k LUTs without DSPs. Here weights are registers
  (about 10k flip-flop bits) and the multipliers are generic. Resource figures are therefore
  not comparable, and the classification quality depends entirely on the loaded model.
* **Scope.** Only one macro-cell is built. Tiling macro-cells over a chamber is not built.
  Neither are the front-end, TDC, optical link and DMA read-out around the trigger: hits enter
  already deserialised, and primitives leave on plain ports.

## Verification

Each block has a self-checking testbench in `tb/`. Each compares the block against integer or
real-valued reference code in `tb/tb_ref_pkg.sv`, written independently of the RTL, and checks
the block's latency:

| testbench | what it checks |
|---|---|
| `tb_hit_grouping` | random hits on both lanes; exact group, duplicate, accept and replace timing; the sent-then-suppressed sequence |
| `tb_qmlp` | random sparse weights; every logit; 2-clock latency; side-band alignment; saturation |
| `tb_filter_ann` | mask against reference network, 2 clocks |
| `tb_layer_select` | lowest-wire rule, layer count, 3-layer decision |
| `tb_disamb_ann` | classes against reference network and tie rules, 3 clocks |
| `tb_meantimer` | t0 against a real-valued solution for random triplet and quadruplet layouts; the 4-6-3 closed form; rejection cases |
| `tb_track_fit` | slope and position against a real-valued fit and against the generated track |
| `tb_tpg_macrocell` | end to end at default parameters, described below |

`tb_tpg_macrocell` runs the top at default parameters. The stimulus is mixed:

* muons, near-vertical and inclined, some with a missing or late hit;
* noise hits inside and outside the macro-cell;
* up to 5 clocks of random arrival delay.

It predicts every event pulse and every primitive with its exact clock, and checks that:

* each mechanism happened (duplicate, replacement, filter reject, disambiguation reject, no t0
  solution, triplet and quadruplet primitives);
* most clean muons give a t0 within 2 counts of the generated one.

`tb_tpg_sim_sample` loads the top with events like the simulated sample the algorithm was
evaluated on:

* muon angles flat in ±45°;
* about 250 µm of drift smearing;
* some muons losing a hit;
* a 2 % chance of a noise hit per channel and event.

It requires exact agreement with the reference chain and reports efficiency and t0
resolution. With the hand-built networks, the t0 spread of found muons is about 4 ns. About
three quarters of the muons within 15° are found, and most near-vertical ones. Inclined tracks
are often lost because the placeholder disambiguation model handles only near-vertical tracks.
A trained model is needed for the efficiencies the approach is capable of.

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. To run one with Verilator:

```
verilator --binary --timing --assert -y rtl -Itb rtl/tpg_pkg.sv tb/tb_ref_pkg.sv \
    tb/tb_tpg_macrocell.sv --top-module tb_tpg_macrocell
./obj_dir/Vtb_tpg_macrocell
```

The whole design synthesises with Yosys to about 10k flip-flop bits, most of them weight
registers.
