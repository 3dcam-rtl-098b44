# 3DCAM: a crosstalk-avoiding code for TSV buses

Through-silicon vias (TSVs) that connect stacked dies are thick, tall and
closely packed, so each one couples strongly with the eight TSVs around it.
When a TSV switches while its neighbours switch the other way, its effective
load capacitance, and with it the transfer delay, grows several times.
3DCAM lowers that worst case with very little logic: when the middle TSV of a
3x3 cluster is about to make a transition that its neighbours would make
expensive, the transmitter simply *does not make it*. The TSV keeps its old
value, and a dedicated control TSV toggles to tell the receiver that the
value on the middle TSV is stale and must be inverted.

This RTL implements the coder, the decoder and a complete 64-bit link in
SystemVerilog, with self-checking testbenches. It follows the published 3DCAM
mechanism (Mirosanlou, Taram, Shirmohammadi and Miremadi); the points where
the publication leaves a choice open, and the choices made here, are listed
in [Where this RTL decides for itself](#where-this-rtl-decides-for-itself).

## Crosstalk classes

Number the TSVs of a cluster row by row, I-4 … I4, with the victim I0 in the
middle:

```
   I-4  I-3  I-2        diagonal  direct  diagonal
   I-1  I0   I1         direct    victim  direct
   I2   I3   I4         diagonal  direct  diagonal
```

Each neighbour i adds its coupling capacitance times |ΔV0 − ΔVi| / Vdd, which
is 0 if it makes the same transition as the victim, 1 if exactly one of the
two is quiet, and 2 for opposite transitions. Direct neighbours couple with
C_α = 1.5 C_β, diagonal neighbours with C_β. With `a` the sum of the four
direct terms and `b` that of the four diagonal terms,

```
C_eff = C_G + (1.5 a + b) C_β           0 <= a, b <= 8
```

Classes are the half-C_β steps of C_eff: class 0 is C_G, class k ≥ 1 is
C_G + (k+1)/2 C_β, up to class 39 = C_G + 20 C_β (all eight neighbours
switching against the victim). In hardware this is

```
v     = 3a + 2b                 (C_eff - C_G in units of C_β/2, 0..40)
class = (v == 0) ? 0 : v - 1
```

v = 1 and v = 39 cannot occur, so class 38 never appears. Higher classes mean
more delay; the delay model is τ = (1 + ρ1 λ1 + ρ2 λ2) π0.

A few patterns (↑ rise, ↓ fall, − quiet; middle = victim) and what dropping the
victim's transition does to them:

| pattern (rows top to bottom) | class | victim held | class |
|---|---|---|---|
| `− ↑ ↓ / − ↓ ↑ / − ↑ ↓` | 24 | `− ↑ ↓ / − − ↑ / − ↑ ↓` | 12 |
| `↓ ↓ − / − ↑ − / ↑ − ↓` | 24 | `↓ ↓ − / − − − / ↑ − ↓` | 8 |
| `− ↓ − / ↓ ↑ ↓ / − ↓ −` | 31 | `− ↓ − / ↓ − ↓ / − ↓ −` | 11 |
| `↓ ↓ ↓ / ↓ ↑ ↓ / ↓ ↓ ↓` | 39 | `↓ ↓ ↓ / ↓ − ↓ / ↓ ↓ ↓` | 19 |
| `↓ ↓ ↓ / ↑ ↓ ↓ / ↓ ↓ ↓` | 5 | `↓ ↓ ↓ / ↑ − ↓ / ↓ ↓ ↓` | 19 |

The last row shows why holding is not always good: a victim that switches
*with* its neighbours is cheap, and holding it makes it expensive. Hence the
switch threshold.

## The coding rule

For each cluster, at every transfer:

* if the victim would switch **and** the class of the uncoded pattern is
  **greater than ST**, drive the victim's previous value and toggle the
  cluster's control TSV;
* otherwise drive the data bit and leave the control TSV alone.

ST defaults to 20, the middle of the class range. Holding the victim turns
every neighbour term into 0 or 1, so a held victim always ends at class 19 or
less: with ST = 20, a cluster on its own never leaves its victim above ST.

Decoding needs no knowledge of the neighbours. If the control TSV toggled
since the previous transfer, the coder dropped a transition, so the data bit
is the complement of what the victim still carries; otherwise the victim
carries the bit. One register of previous control values and one XOR per
victim do it.

## Bus layout

The bus is a 3 x N grid of TSVs. Data bit b sits in column b/3, row b%3.
Every middle-row TSV except the two at the ends of the row is the victim of
the cluster centred on it, so clusters overlap by two columns and there are
N − 2 victims and N − 2 control TSVs:

```
 column     0    1    2    3   ...  N-2  N-1
 row 0      .    .    .    .         .    .
 row 1      .    V    V    V   ...   V    .      V = victim, one control TSV each
 row 2      .    .    .    .         .    .
```

For the default 64-bit bus N = 22 (66 positions, the top two are filler TSVs
held at 0), giving 20 control TSVs, 31% more TSVs than the data alone. At the
widths 9, 18, …, 63 the overhead is (N − 2)/3N: 11%, 22%, 26%, 28%, 29%, 30%,
30%.

The control TSVs can couple with each other too. With `CTRL_CODING = 1` the
20 control bits are themselves sent as a 3DCAM bus (a 3 x 7 grid plus 5
control-of-control TSVs, 46 extra TSVs in all instead of 20). The default
leaves them uncoded.

### Overlapping clusters decide in parallel

Every cluster coder looks at the raw data of its neighbours, and all of them
decide at once. Two neighbouring victims are each other's direct neighbours,
so when one drops its transition the other's real class changes: a victim
that was at or below ST on the raw data can end above it. On uniformly random
64-bit words about 4% of the victim transfers that were above ST stay above
ST after coding (1198 of 26895 in the end-to-end test), all of them below
class 27. A sequential left-to-right decision would remove these cases at the
price of a ripple through all 20 coders; the parallel form is kept because it
is what a per-cluster coder gives.

## Interface and timing of the link (`cam_link`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock and asynchronous active-low reset, shared by both dies |
| `en_i` | in | 1 | a word is transferred at this clock edge |
| `data_i` | in | 64 | word to send (die X) |
| `data_o` | out | 64 | received word (die Y) |
| `tsv_o` | out | 66 | data TSV nets, bit 3c+r = column c, row r |
| `ctrl_tsv_o` | out | 20 (26 coded) | control TSV nets |
| `retain_o` | out | 20 | victims whose transition the next edge drops |

A word presented with `en_i` high is registered into the TSV drivers at the
clock edge and appears on `data_o` during the following cycle; it stays there
until the next transfer. With `en_i` low nothing on the bus switches. Reset
clears the TSVs, the control TSVs and the receiver's copy of the control
values, so both sides start agreeing. The TSVs are modelled as ideal wires;
their nets are outputs so that crosstalk can be measured in simulation.

Parameters: `DATA_W` (64), `ST` (20), `CTRL_CODING` (0); `COLS`, `NV` and the
widths derive from them (`COLS = ceil(DATA_W/3)` must be at least 3).

## Modules

| file | what it is |
|---|---|
| `rtl/cam_pkg.sv` | cluster numbering, neighbour masks, transition type, coupling term |
| `rtl/xtalk_class.sv` | class 0..39 of the victim of one cluster (combinational) |
| `rtl/cam_cluster_coder.sv` | hold/toggle decision for one cluster (combinational) |
| `rtl/cam_encoder.sv` | die-X side: grid placement, one coder per victim, TSV driver registers |
| `rtl/cam_decoder.sv` | die-Y side: previous-control register and the victim XORs |
| `rtl/cam_link.sv` | top: encoder, TSV nets, decoder, optional second level for the control TSVs |

One cluster coder synthesises to about 140 generic cells; the whole 64-bit
link to about 2200 cells and 104 flip-flops.

## Testbenches

All are self-checking and end with a `TB_RESULT checks=… failures=…` line.
The reference model in `tb/cam_ref_pkg.sv` computes classes from the grid
geometry with real arithmetic, independently of the RTL.

| testbench | what it checks |
|---|---|
| `tb_xtalk_class` | all 2^18 before/after cluster pairs, the worked examples above, the class-0, 1 and 39 table patterns |
| `tb_cam_cluster_coder` | all 2^19 inputs at ST = 20 and ST = 30; held victims end at class ≤ 19 |
| `tb_cam_encoder` | 20 000 transfers against the reference coder, latency, idle cycles, reset |
| `tb_cam_decoder` | single control toggles, then 20 000 coded transfers decoded |
| `tb_cam_link` | end to end at full size: 16 000 transfers of four traffic kinds, TSV nets vs. reference, reset in flight, class histograms |
| `tb_cam_link_ctrl` | the same with the control TSVs coded |
| `tb_cam_st_sweep` | eight links with ST from 0 to 39 on the same traffic |
| `tb_cam_widths` | links of 9 … 63 bits: control-TSV count and round trip |

Results of `tb_cam_link` (synthetic traffic, victims only):

| traffic | mean class uncoded → coded | mean worst class per transfer |
|---|---|---|
| uniform random | 11.8 → 8.9 | 22.8 → 16.8 |
| small integers | 1.6 → 1.3 | 14.7 → 11.4 |
| slowly rising addresses | 0.75 → 0.54 | 10.4 → 7.2 |
| random / inverted words | 12.9 → 10.3 | 24.1 → 16.8 |

These numbers count the data victims only. The control TSVs add switching of
their own, which is why the threshold sweep (`tb_cam_st_sweep`) keeps
improving as ST falls instead of showing the optimum at ST = 20 that a full
delay measurement including the control TSVs gives. No real benchmark traces
are included.

To run one with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/cam_pkg.sv tb/cam_ref_pkg.sv rtl/xtalk_class.sv rtl/cam_cluster_coder.sv \
  rtl/cam_encoder.sv rtl/cam_decoder.sv rtl/cam_link.sv tb/tb_cam_link.sv \
  --top-module tb_cam_link
./obj_dir/Vtb_cam_link
```

Every testbench finishes in seconds.

## Where this RTL decides for itself

* **Neighbour weights.** The weighted-sum formula of the published model puts
  C_α on the even-numbered TSVs, which in the numbering above are the
  diagonal ones; the description and the cluster drawing put it on the
  north/south/east/west neighbours. This RTL follows the latter, and with it
  reproduces every class of the worked examples.
* **Class table.** Two example patterns printed in the class table (for
  classes 2 and 3) do not give the C_eff printed beside them; the class
  numbering here follows the C_eff column.
* **Control-TSV count.** One sentence speaks of one extra TSV per 9-TSV
  cluster (11%), while the overhead quoted is about 30% and rises with width;
  one control TSV per middle-row TSV of every overlapping cluster gives
  exactly that curve, and is what is built.
* **Bit placement, filler TSVs, parallel decisions, transfer strobe, reset
  values, registered drivers, one-cycle latency** are not specified in the
  publication and are this design's choices.
* **Second coding level** is only suggested in the publication; its layout
  here (the control bits as an ordinary 3DCAM bus coded in the same clock
  edge) is this design's.
* Not built: the TSVs themselves (physical structures) and the comparison
  schemes (3DLAT, ShieldUS). A 5-bit bus, which appears in the overhead
  comparison, does not fit the 3 x N layout used here (N ≥ 3).
