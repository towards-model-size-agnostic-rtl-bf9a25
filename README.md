# Memorization-based inference engine

This engine classifies an image with no multiply-accumulate work at inference
time. A trained recurrent attention model (RAM) looks at an image through a
few small *glimpses*. At each glimpse it turns {where it looks, what it has
seen so far, what the glimpse shows} into {where to look next, what it has now
seen, its current guess}. That mapping has few enough input bits to be
*memorised*: it is sampled offline into a table of key/value pairs. At
inference the engine extracts a glimpse, finds the stored key closest to it,
and reads the value. After five glimpses the last value's guess is the class.

Three ideas keep the table usable:

* **Incomplete tables with a nearest match.** The table holds a sample of
  the input space, not every input. A lookup returns the *closest* key under a
  weighted distance, so it does not need an exact hit.
* **A lookup tree.** Hierarchical K-means clustering arranges the keys as a
  tree of small LUTs (lookup tables) of at most 32 rows. Centroid nodes send
  the query down to a leaf LUT, and only that leaf's keys are compared.
* **Distance computed inside the memory.** Each LUT's keys sit in
  compute-in-memory (CIM) SRAM arrays. One array read yields a row's distance
  to the query as an analog voltage. A 5-bit ADC digitises it, and a digital
  comparator keeps the running minimum while the rows are scanned.

*Mixed* inference is a further option. If, at any glimpse, the best leaf key
is farther from the query than a threshold, the image goes to a conventional
network instead (the `fallback` output). The threshold trades accuracy
against the share of images that lookups alone can classify.

This RTL follows a published design (memorization-based inference, MBI, on
MNIST digits). That publication describes the analog array and the algorithm
but not the digital control around them. Everything the publication leaves
open is this implementation's own choice, and the section *Departures and
choices* lists those choices.

## One inference, step by step

```
 start(loc0) ─► glimpse_extractor ─► query_register ─► tree walk ─► leaf value ─┐
                    ▲   (patch)        {loc,h,patch}   (LUT searches)            │
                    └──── next location, next hidden state ◄─────────────────────┘
                                     × 5 glimpses  ─►  class_out / fallback
```

1. `glimpse_extractor` reads the image buffer around the current location.
   It makes two 4x4 patches. Patch 0 takes pixels 1:1 from a 4x4 window.
   Patch 1 covers an 8x8 window and averages each 2x2 block. Every element
   is quantised to 2 bits.
2. `query_register` packs {location, hidden state, patch} into the 160-bit
   query (see *Key layout*). It drives the query onto the CL lines of the
   five partition arrays, and its complement onto the CLB lines.
3. `mbi_controller` walks the tree from node 0 and runs one LUT search per
   node. At a centroid node, the payload of the winning row names the child
   node. At a leaf, the payload is the value {next location, next hidden
   state, action}.
4. If the leaf's best distance is above `threshold`, inference stops with
   `fallback = 1`. Otherwise the value feeds the next glimpse. The first
   glimpse uses the host's start location and an all-zero hidden state.
5. After glimpse 5, `class_out` is the action of the last value.

## The in-memory distance search (hardest part)

### What one array computes

A partition array has 32 columns. Each column is a pair of bit lines, BL and
BLB, and every row holds one key. Each cell is a 10-transistor SRAM cell: a
6-T storage cell plus a 4-T port that can pull down BL or BLB. Each row is
evaluated in four steps, one clock cycle each in this RTL:

| step | strobe | effect |
|------|--------|--------|
| 1 | `pch`  | Precharge BL and BLB of column c to V_P(c). V_P(c) encodes the bit significance of that column (see below). |
| 2 | `eval` | Raise the row line. A cell with key bit k=1 and query bit q=0 discharges BL. A cell with k=0 and q=1 discharges BLB. Matching bits leave both lines charged. |
| 3 | `csum` | Transmission gates join all BL onto sum line SLP and all BLB onto SLN. Charge sharing makes each sum line the average of its bit lines. |
| 4 | `conv` | The ADC samples (V_SLP + V_SLN)/2. |

Every mismatching column discharges exactly one of its two lines, so the drop
of the sum-line average is

    drop = (1 / 2C) · Σ_{c : k_c ≠ q_c} V_P(c),   C = 32 columns.

**Bit significance by precharge level.** For p-bit elements, the column of
bit j is precharged to V_P,max / 2^(p-1-j). The MSB column sits at V_P,max
and each lower bit gets half the level of the bit above it. A mismatch in bit
j therefore counts 2^j, relative to the element's LSB. In the RTL, each
column has a 3-bit code `cs` with V_P = V_P,max >> cs. Code 7 switches the
column off.

**What this distance is.** The array sums Σ_j |k_j − q_j| · 2^j over each
element. This is a weighted *bit-mismatch* count. It equals |K − Q| when
only one bit differs, but not in general. For 2-bit elements, 01 against 10
scores 3, although the values differ by 1. Three cases need separate notes:

* For the 1-bit hidden-state elements, the score is the Hamming distance.
* For the 2-bit patch elements, it is an upper bound of the Manhattan
  distance.
* The 5-bit location coordinates use the same rule, so their score is an
  upper bound too.

The testbenches check the circuit's rule, not the true Manhattan distance.

**The ADC.** The model converts ratiometrically against `v_ref`. `v_ref` is
the level that the sum lines would have with no discharge, supplied by a
dummy column pair in the model:

    code = min(31, floor(32 · 2·drop / v_ref))
         = min(31, floor(32 · Σ_mismatch V_P / Σ_all V_P))

So the code is the discharged fraction of the precharged charge, in 1/32
steps, and code 0 means an exact match. Resolution is limited. In a patch
partition, one LSB mismatch is 8/384 of the charge, or 0.67 code. A single
LSB difference can therefore vanish, and a partition saturates at 31 once
about 97 % of its weighted bits differ.

### From partition codes to a row distance

The key is 160 bits wide, so it is split over five arrays that work in
lock-step on the same row. The per-row pipeline behind the arrays is:

```
 cim_array ─► sl_adc ─► bo_weight_mult ─► partition_sum ─► min_search
  (×5)        (×5)       (×5, ×w_p)        (Σ over 5)      (Min-Val, Min-Index)
 CONV cycle   +1          +2                +3              registered at +3
```

Each partition's code is multiplied by its weight w_p. The weights are the
learned factors a (patch), b (hidden state) and c (location) of the
distance metric

    D = (a·M_patch + b·M_hidden + c·M_location) / (a + b + c).

The factors are found offline by Bayesian optimisation. The division is left
out, because it is the same for every key and does not change which key wins.
The `threshold` is given in the same unnormalised units: weighted ADC codes.
`min_search` keeps the first row that has the smallest distance.

### Modelling of the analog parts

`precharge_dac`, `cim_array` and `sl_adc` are behavioural models. They are
clocked models with ideal behaviour: no charge injection, no offset, no
device mismatch. Voltages are unsigned integers in microvolts. V_P,max is
819.2 mV, so every precharge level (down to V_P,max/16) and every average
over 32 columns is a whole number of microvolts. As a result, the code that
the voltage model produces is exactly the charge-ratio formula above.

Physically, every tree node has its own five 32x32 arrays. To keep simulation
practical, the model folds all nodes of one partition into one storage array
addressed by {node, row}, with one shared DAC and sum-line model. This is
equivalent because the engine searches one node at a time. The published
work reports a smallest sum-line step of at least 28 mV under transistor
variation (σ_VTH = 60 mV). That step is what makes 5 bits of ADC
resolution usable. The RTL does not model the variation.

## Key layout

The key has 160 columns, in 5 partitions of 32. Column c of partition p is
query bit 32p + c.

| partition | content | precision | precharge code `cs` (default) |
|-----------|---------|-----------|-------------------------------|
| 0 | patch 0, elements 0..15 (row-major 4x4) | 2 bit: element e in cols 2e (LSB), 2e+1 (MSB) | 1 (LSB col), 0 (MSB col) |
| 1 | patch 1 (8x8 window averaged to 4x4) | 2 bit, same layout | same |
| 2 | hidden state bits 0..31 | 1 bit | 0 |
| 3 | hidden state bits 32..63 | 1 bit | 0 |
| 4 | location x (cols 0..4), y (cols 5..9), cols 10..31 unused | 5 bit binary, LSB first | 4,3,2,1,0 per coordinate; unused cols 7 (off) |

The components sit in separate partitions, so each one gets its own weight:
a for partitions 0–1, b for 2–3 and c for 4. The host can rewrite the `cs`
codes and so use another layout, but `query_register` and
`glimpse_extractor` build the query in this one.

## The lookup tree

`node_memory` holds, for every node:

* `desc[node] = {is_leaf, nrows}`, where nrows is 1..32 valid rows;
* `payload[node][row]`. For a centroid node, this is the child node number
  in bits [15:0]. For a leaf, it is the value:
  `value_t = {loc (y,x: 2×5 bit), hidden (64 bit), action (4 bit)}`.

Centroid rows and leaf keys are stored and searched the same way: as keys in
the CIM arrays, with one full row scan per level. With the published average
of 3.5 levels, a glimpse costs 3.5 × 32 row evaluations on each of the 5
arrays. The root is node 0. The host may lay out the other nodes in any
order, and nodes may have fewer than 32 rows. A walk deeper than `MAX_DEPTH`
(8) nodes stops with `error`. This guards against corrupt tables.

## Timing

All blocks run on one clock with an asynchronous active-low reset. The
memories have no reset.

| operation | cycles |
|-----------|--------|
| glimpse extraction | 80: one pixel per cycle, 16·1 + 16·4 |
| LUT search of n rows, `start` to `done` | 4n + 4 |
| one tree level, including the descriptor and payload reads | 4n + 8 |
| one glimpse | 82 + Σ over its levels (4n + 8) |
| one inference, `start` to `done` | 2 + Σ over glimpses |

With full 32-row nodes and 3.5 levels, a glimpse takes about 560 cycles and a
5-glimpse inference about 2 800 cycles. The end-to-end testbench checks this
formula cycle for cycle.

## Host interface (`mbi_top`)

All writes take one cycle.

* `key_we, key_node, key_row, key_part, key_data[31:0]`: write 32 key bits
  of one partition.
* `desc_we, desc_node, desc_wdata{is_leaf,nrows}`: write a node descriptor.
* `pay_we, pay_node, pay_row, pay_wdata[77:0]`: write a row payload.
* `img_we, img_addr (= row·28 + col), img_data[7:0]`: write one image pixel.
* `weight_we, weight_part, weight_data[7:0]`: write a partition weight.
  The reset value is 1, which means unweighted.
* `cs_we, cs_part, cs_col, cs_data[2:0]`: write a column precharge code.
  The reset value is the layout above.
* `threshold[16:0]`: the mixed-inference limit, in weighted ADC codes. Set it
  to all ones for lookups only.
* `start, start_loc` → `busy`, `done` (a one-cycle pulse), `class_out`,
  `fallback`, `error`, `n_searches`, `n_glimpses`. The outputs hold until the
  next `start`.

The conventional network that classifies fallback images is not part of this
RTL. When `fallback = 1`, the image is still in the buffer for it. The keys,
centroids, values and weights are produced offline: by sampling RAM episodes,
by Bayesian optimisation and by clustering. They are loaded through the
ports above.

## Files

| file | role |
|------|------|
| `rtl/mbi_pkg.sv` | sizes, key layout, `value_t`, `node_desc_t`, `cim_ctrl_t`, `default_cs()` |
| `rtl/mbi_top.sv` | top level, configuration registers, five partition slices |
| `rtl/mbi_controller.sv` | glimpse loop, tree walk, threshold |
| `rtl/lut_search_ctrl.sv` | four-step row sequencer, includes `min_search` |
| `rtl/min_search.sv` | comparator, Min-Val and Min-Index |
| `rtl/cim_array.sv` | behavioural 10-T CIM array, includes `precharge_dac` |
| `rtl/precharge_dac.sv` | behavioural column DAC |
| `rtl/sl_adc.sv` | behavioural sum-line averaging and 5-bit ADC |
| `rtl/bo_weight_mult.sv`, `rtl/partition_sum.sv` | weight multiply and partition adder |
| `rtl/query_register.sv` | query assembly and CL/CLB drivers |
| `rtl/node_memory.sv` | node descriptors, child pointers and values |
| `rtl/glimpse_extractor.sv` | image buffer and multi-resolution glimpse |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_mbi_threshold_sweep` (mixed-inference workload) and `tb_mbi_table_capacity` (6.21 MB table) |
| `tb/tb_mbi_ref_pkg.sv` | reference models (mismatch distance, glimpse) shared by testbenches |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. For example,
the end-to-end test at full size:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mbi_pkg.sv tb/tb_mbi_ref_pkg.sv tb/tb_mbi_top.sv --top-module tb_mbi_top -o sim
./obj_dir/sim
```

Verilator builds this in about 20 s, and the run takes under a second.
`tb_mbi_top` uses the default sizes (8192 nodes) and does the following:

* loads a three-level tree: 1 root, 8 centroid nodes and 32 leaves with 8–32
  keys each;
* runs up to 18 inferences over 6 random images, with random weights and
  three threshold settings;
* compares class, fallback, search count, glimpse count and cycle count with
  its own reference model.

The test also requires each of these to happen at least once: a descent
through a centroid node, an accepted leaf lookup, a fallback, a complete
5-glimpse run and an exact key match. `tb_mbi_threshold_sweep` runs the mixed-inference workload at the default
sizes:

* it plants near copies of each image's real glimpse queries (a few bits
  flipped) in the leaves;
* it sweeps the threshold over 0, 2, 4, 5, 7, 8, 10, 12 and "off" for 8
  images;
* it checks every run against the reference model;
* it checks that the number of images classified by lookup alone never falls
  as the threshold rises;
* it then reprograms the column precharge codes (location ignored) and the
  weights through the host port, and checks again.

A typical run prints coverages of 0, 1, 5, 6, 7 and 8 of 8 images. This is
the same trade-off shape as the published coverage curve, but on synthetic
tables.

`tb_mbi_table_capacity` runs the table-size workload at the default sizes:

* it loads a 6.21 MB table (6523 leaves of 32 keys and values) under a
  four-level tree of 32, 32×32 and 1024 centroid nodes, which uses 7580 of the
  8192 nodes and 216 315 of the 262 144 rows;
* it places the last leaf at the highest node address and steers one walk
  there;
* it checks every inference against the reference model, once with lookups
  only and once with threshold 0.

Loading the table through the host ports takes about 1.3 million cycles, and
the whole run takes about 2 s.

The other testbenches test one module each against values worked out
independently. Examples are the sum-line
voltages per column, ADC codes from the charge ratio, glimpse block averages,
and the step order and latency of the row sequencer.

Trust level: every module is checked against its own reference model, and the
whole engine against an algorithmic model. None of the table contents come
from a trained network, because the published tables are not available. So
the tests show that the engine finds the nearest key and follows the tree
correctly. They do not reproduce any published accuracy.

## Sizes and capacity

| quantity | value | origin |
|----------|-------|--------|
| keys per LUT | 32 | published |
| array | 32 x 32 | published text; the array drawing shows 64 columns |
| key partitions | 5 (160 bits) | published |
| ADC | 5 bit | published |
| glimpses | 5 | published |
| patch / hidden precision | 2 bit / 1 bit | published |
| patch geometry | 4x4, 2 patches, scale 2 | chosen from the published accuracy sweeps |
| hidden state | 64 | chosen from the published sweep |
| tree nodes | 8192 | chosen, see below |

The published table is 6.21 MB. Node memory plus keys hold
8192 × 32 × (160 + 78) bits, which is 7.80 MB. That is enough for tables of
1.33–6.21 MB, if the published byte count covers keys and values in the same
format. `tb_mbi_table_capacity` loads and searches the 6.21 MB case, with
its 1057 centroid nodes in the same memory. The memory is not enough for the
7.98 and 8.87 MB points of the published table-size sweep.

## Departures and choices

* **Array width.** The array drawing labels 64 query columns (q0..q63), but
  the text and the energy figure use a 32x32 array. This RTL uses 32.
* **Distance.** The array computes the significance-weighted bit mismatch
  (see above), which the publication calls the Manhattan distance. The RTL
  keeps the circuit's behaviour.
* **Distance normalisation.** The division by (a+b+c) is omitted.
  Threshold values from the publication (for example "5") are in the
  authors' software units and do not carry over directly.
* **Own choices, not in the publication:**
  * the ADC transfer function and its reference;
  * the one-cycle-per-step timing;
  * the tree storage format and node-memory split;
  * stopping at the first glimpse that misses the threshold;
  * taking the class from the last glimpse's action;
  * the zero initial hidden state;
  * the glimpse reduction by averaging, with zero padding and a truncating
    quantiser;
  * all host-port formats.
* **Not modelled:** transistor-level behaviour, process variation, energy.
* **Not built:** the fallback network and the offline distillation,
  optimisation and clustering flow.
