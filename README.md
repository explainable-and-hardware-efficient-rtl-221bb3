# CTM jamming detector for 5G synchronisation signals

A jammer that stays below the level where link-layer counters react can still
distort the primary synchronisation signal (PSS), the first OFDM symbol of
every 5G NR synchronisation signal block. This design classifies a
time-frequency picture of that symbol as *pure* or *jammed* with a
Convolutional Tsetlin Machine (CTM). A CTM needs no arithmetic beyond
counting. It slides a small window over a Boolean image. On each window it
evaluates a few hundred AND-clauses over the window's bits and its position.
Each clause that fires anywhere in the image casts a +1 or −1 vote for its
class, and the class with the most votes wins. Every decision can therefore
be traced back to the literals of the clauses that fired.

The RTL implements the inference path of the published CTM configuration:

| item | value |
|---|---|
| input image | 100 × 100 greyscale spectrogram of the PSS symbol |
| Booleanization | "Enhanced Otsu": one Otsu threshold, image OR its 90° rotation |
| patch | 10 × 10, stride 1 → 91 × 91 = 8,281 patch positions |
| features per patch | 100 pixels + 90 + 90 position bits = 280; 560 literals |
| clauses | 200 per class, 2 classes (pure, jamming) |
| polarity | alternating: clause 0 of a class votes +1, clause 1 −1, … |
| clock target | 100 MHz |

Training, the radio front end, synchronisation and the short-time FFT that
produces the spectrogram are outside this design. A trained model is loaded
as Tsetlin-automaton (TA) states, and the picture arrives as a pixel stream.

## Data flow

```
 pixels ──► otsu_binarizer ──rows──► image_buffer ──10 rows──► patch_generator ──560 literals──┐
 (8 bit,     histogram, Otsu t,      100 × 100 bits           window at (y,x) + thermometer   │
  raster)    OR with rotation                                  coded position, registered      ▼
                                                                                          clause_bank
 TA states ──► ta_memory ──────────── 100 clauses × 560 include bits per group ─────────► 100 clauses,
 (host load)   400 clauses                                                               sticky OR over
                                                                                          all patches
                                                                                              │
               ctm_controller: group → scan 8,281 positions → drain → add                     ▼
                                                                                          class_sum ──► class sums,
                                                                                          ±1 votes      decision
 pss_generator: 127-chip PSS reference for the external synchronisation front end
```

`ctm_top` wires these together. The binarizer may already take in the next
image while an inference runs. It then holds its binary rows (`out_ready`
low) until the image buffer is free. The last row written starts the
inference.

## The convolutional clause engine

This part takes the most care to get right, because the trained model and the
hardware must agree bit for bit on the layout.

### Literal vector

For the patch whose top-left pixel is at row `y`, column `x`
(0 ≤ y, x ≤ 90), `patch_generator` builds 280 features, index 0 first:

| feature index | meaning |
|---|---|
| 0 … 89 | y thermometer: feature k = (y > k) |
| 90 … 179 | x thermometer: feature 90 + k = (x > k) |
| 180 … 279 | patch pixel (r, c), 0 ≤ r, c < 10, at 180 + 10·r + c; value = image[y + r][x + c] |

Literal `i` (0 ≤ i < 280) is feature `i`. Literal `280 + i` is its negation.
The thermometer code lets a single clause express "y is at least k" or "x is
below k" with one literal. A clause can therefore tie a pattern to a band of
frequencies or a span of time. This is the feature order of the common CTM
software, so a model trained there maps literal index for literal index.

### Tsetlin automata and include bits

Each clause owns one TA per literal. A TA with 2N states excludes its literal
in states 1…N and includes it in states N+1…2N. The store uses 8-bit states
(N = 128) and takes the state as the value `state − 1` (0…255). A literal is
therefore included exactly when the top bit of the loaded value is set.
`ta_memory` keeps only that include bit, because inference needs nothing
more. That is 400 × 560 = 224,000 bits.

The clauses are numbered class-major: entry `e = class·200 + clause`. The
store is organised as 100 lane memories of 4 words each. Entry `e` lives in
lane `e mod 100`, word `e / 100`. One read therefore returns a whole *group*
of 100 clauses:

| group | entries | content |
|---|---|---|
| 0 | 0 … 99 | class 0 (pure), clauses 0 … 99 |
| 1 | 100 … 199 | class 0, clauses 100 … 199 |
| 2 | 200 … 299 | class 1 (jamming), clauses 0 … 99 |
| 3 | 300 … 399 | class 1, clauses 100 … 199 |

### Clause value, image-level output, vote

On one patch, clause j fires when it includes at least one literal and every
included literal is 1:

    fire_j = |include_j  &  &(literals | ~include_j)

A clause that includes nothing never fires. A trained model usually leaves
some clauses empty, and they must not vote. The convolutional output of the
clause for the image is the OR of `fire_j` over all 8,281 patches.
`clause_bank` keeps it in one sticky bit per clause, cleared before each
group.

`class_sum` then adds the votes. Clauses with an even number within their
class vote +1, clauses with an odd number vote −1. The decision is the class
with the larger sum; a tie goes to class 0 (pure). The sums are not clipped
to ±T: T only shapes training feedback. Sums range over −100…+100 and are
carried as 9-bit signed values.

### Schedule

`ctm_controller` runs the four groups one after another. For each group it:

1. LOAD (1 cycle): reads the group from `ta_memory` and clears the clause bits;
2. SCAN (8,281 cycles): issues every patch position once, row by row;
3. DRAIN (1 cycle): lets the last patch pass the literal register;
4. ACC (1 cycle): adds the group's votes to the class sums.

From the cycle the last image row is written to the cycle `result_valid` is
high takes 4 · (8,281 + 3) + 1 = **33,137 cycles**. That is 331 µs at 100 MHz,
or 3,018 images per second (2,414 at 80 % utilisation). Feeding one image
takes 10,000 pixel cycles plus 256 threshold cycles. It overlaps with the
previous inference, so the CTM sets the sustained rate. `CLAUSE_PAR` trades
area for speed. Halving it doubles the number of groups and the scan time,
and doubling it halves them; it must divide CLASSES · CLAUSES = 400.

## Enhanced Otsu binarization

`otsu_binarizer` stores the 100 × 100 pixels and builds a 256-bin histogram
while they stream in. It then walks the bins, one per cycle, keeping the
pixel count `w0` and pixel sum `s0` at or below the current bin. Otsu's
threshold maximises the between-class variance. With N pixels of total S,
that is the bin with the largest

    (N·s0 − S·w0)² / (w0 · (N − w0))

Empty classes (`w0 = 0` or `w0 = N`) are skipped. Two candidates are compared
by cross-multiplying numerator and denominator (about 100-bit products), so
no divider is needed. The first maximum wins, and the threshold stays 0 when
no split beats 0. The output bit for row i, column j is

    (p[i][j] > t)  OR  (p[j][99 − i] > t)

which is the thresholded image ORed with the thresholded image rotated 90°
counter-clockwise. The rotation changes no pixel values, so both images share
one threshold. OR-ing in the rotation lets vertical and horizontal structures
both reach the clause engine.

## PSS reference generator

`pss_generator` produces the 127-chip PSS of sector `N_ID2 ∈ {0,1,2}`,
d(k) = 1 − 2·s((k + 43·N_ID2) mod 127). The m-sequence comes from
s(i+7) = s(i+4) ⊕ s(i) with [s(6)…s(0)] = 1110110. A 7-bit shift register
produces one chip per cycle. Its start state for each sector is computed from
the recurrence at elaboration time, so no table is stored. The receiver's
carrier-offset search correlates against this sequence. That search is not
part of this design, so the generator's stream is brought out on `ctm_top`'s
`pss_*` ports.

## Loading a model

With `busy` low, drive `ld_en` with `ld_clause = class·200 + clause`,
`ld_literal` (0…559, layout above) and `ld_state` (0…255). Load one TA per
cycle; a full model takes 224,000 cycles. An assertion flags a load during an
inference. From a trained TM model, write for each clause the 8-bit TA state
of each literal, or simply 255 for included and 0 for excluded literals. The
clause order within a class must match the alternating polarity used here.

## Interface of `ctm_top`

| port | dir | meaning |
|---|---|---|
| `pix_valid`, `pix_ready`, `pix_data[7:0]` | in/out/in | spectrogram pixels, raster order |
| `ld_en`, `ld_clause[8:0]`, `ld_literal[9:0]`, `ld_state[7:0]` | in | model load |
| `busy` | out | inference running |
| `result_valid` | out | one-cycle pulse: result below is valid |
| `jamming`, `pred_class` | out | decision (class 1 = jamming) |
| `class_sums[2]` (9-bit signed) | out | class sums |
| `threshold[7:0]` | out | Otsu threshold of the image being processed |
| `pss_start`, `pss_nid2[1:0]` | in | request a PSS sequence |
| `pss_busy`, `pss_valid`, `pss_index[6:0]`, `pss_bit`, `pss_bpsk[1:0]`, `pss_last` | out | PSS chip stream |

Reset `rst_n` is asynchronous and active low. It resets control state and
sums, but not the image, pixel or TA stores; those are always written before
they are read.

## Parameters

Sizes are set in `ctm_pkg` and can be overridden on `ctm_top`:

| parameter | default | origin |
|---|---|---|
| `H`, `W` | 100 | published spectrogram size |
| `PATCH` | 10 | published patch size |
| `CLASSES` | 2 | pure / jamming |
| `CLAUSES` | 200 | published clause count, read as per class |
| `CLAUSE_PAR` | 100 | this design: clauses evaluated per cycle |
| `TA_BITS` | 8 | this design: TA state width |
| `PIX_BITS` | 8 | this design: pixel width |

The published study also reports models with 7 × 7 and 9 × 9 patches for other
Booleanization methods. They run with `PATCH` changed, but their
Booleanization methods are not built here. Its three FPGA deployment
profiles use 256, 512 and 800 clauses in all. The source does not give the
split per class, so an even split is assumed: `CLAUSES` = 128, 256 or 400.

| configuration | overrides | cycles per image | images/s at 100 MHz |
|---|---|---|---|
| default | none | 33,137 | 3,018 |
| Power profile | `CLAUSES=128 CLAUSE_PAR=64` | 33,137 | 3,018 |
| Latency profile | `CLAUSES=256 CLAUSE_PAR=128` | 33,137 | 3,018 |
| Accuracy profile | `CLAUSES=400 CLAUSE_PAR=100` | 66,273 | 1,509 |
| 7 × 7 patches | `PATCH=7` | 35,357 | 2,828 |
| 9 × 9 patches | `PATCH=9` | 33,869 | 2,953 |

Cycles per image = groups × ((H − PATCH + 1)(W − PATCH + 1) + 3) + 1, with
groups = 2 · `CLAUSES` / `CLAUSE_PAR`.

## How far to trust it, and where it departs from the source

Taken from the published description: the image and patch sizes; the clause
count; the CTM principle (patches plus position features, TA include/exclude
halves, ±1 polarity, class sum); the Enhanced Otsu definition; the PSS
equations; and the 100 MHz, stride-1 operating point.

Choices made here, because the source gives only a resource projection and
no microarchitecture:

- the thermometer position code and the literal order (the usual CTM
  software layout);
- 200 clauses *per class*;
- empty clauses outputting 0;
- the argmax decision with ties to class 0;
- 8-bit TA states and 8-bit pixels;
- the group-serial schedule with 100 clauses per cycle, chosen to land in
  the projected 1–2.5 k samples/s range;
- rotation direction, "> t" and first-maximum conventions of the
  binarizer;
- all handshakes and the load port.

The published throughput and LUT figures are literature projections, not
measurements, and this RTL was not placed and routed. Its throughput
(3,018/s at 100 MHz) is exact by construction. Its area is not known.
Two paths would need attention before 100 MHz is met on an FPGA:

- The Otsu comparison multiplies two ~72-bit by ~28-bit quantities in one
  cycle. It could be pipelined at the cost of a few cycles per bin.
- The 560-input AND of each clause is registered only at the sticky clause
  bit.

Only inference is built. The TA increment and decrement transitions, which
learn the model, happen in training software. `max_included_literals` (22
in the published model) only bounds what training produces. The hardware
accepts any number of included literals per clause.

Not included: the RF capture, carrier-frequency and timing synchronisation,
the spectrogram computation, the other Booleanization methods, and training.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one computes its
expected values independently of the RTL and ends with
`TB_RESULT checks=N failures=M`. For example, the end-to-end test at full
size:

```
verilator --binary --timing --assert -y rtl rtl/ctm_pkg.sv tb/ctm_top_tb.sv \
          --top-module ctm_top_tb -o sim
./obj_dir/sim
```

`ctm_top_tb` loads a 400-clause test model, streams four images back to back,
and recomputes each result in the testbench: floating-point Otsu, then every
clause on every patch. It checks the class sums, the decision and the
33,137-cycle latency. It also checks that the binarizer stalled behind a
running inference, that pixels were accepted during one, that both decisions
occurred and that the PSS stream is correct. It builds in about a minute and
runs in a few seconds. The unit testbenches (`<module>_tb.sv`) build the
same way with `tb/<module>_tb.sv` and `--top-module <module>_tb`.

`ctm_workloads_tb` runs the same end-to-end check, two images each, for the
five non-default configurations in the table under Parameters. Each runs in
its own instance of `tb/ctm_workload.sv`. It needs `-y tb` as well as
`-y rtl`, builds in a few minutes and runs in about 15 seconds.

## Files

| file | content |
|---|---|
| `rtl/ctm_pkg.sv` | sizes, class numbering, feature-count helper |
| `rtl/ctm_top.sv` | top level |
| `rtl/otsu_binarizer.sv` | Enhanced Otsu Booleanization |
| `rtl/image_buffer.sv` | Boolean image, 10-row window read |
| `rtl/patch_generator.sv` | literal vector of a patch |
| `rtl/ta_memory.sv` | TA include store, one group per read |
| `rtl/clause_bank.sv` | 100 parallel convolutional clauses |
| `rtl/class_sum.sv` | votes, class sums, decision |
| `rtl/ctm_controller.sv` | inference schedule |
| `rtl/pss_generator.sv` | PSS m-sequence generator |
| `tb/*_tb.sv` | one self-checking testbench per module, plus `ctm_workloads_tb` |
| `tb/ctm_workload.sv` | one end-to-end run at a given configuration |
