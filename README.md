# Laconic: a term-serial inner-product engine for CNN inference

A 16-bit multiply in a convolution mostly multiplies zeros. Write an
activation `A` and a weight `W` as short lists of signed powers of two
(*one-offsets*), for example `7 = +2^3 - 2^0`. Then `A x W` is the sum of
`t_a x t_w` products, one for each pair of one-offsets, and each product is
itself a signed power of two, `+-2^(t + t')`. For typical CNN activations and
weights such lists are short, so far fewer of these single-term products are
needed than the 256 bit products of a bit-parallel multiplier. The Laconic
engine computes only these products: each lane of a processing element takes
one activation one-offset and one weight one-offset per cycle. It adds their
exponents instead of multiplying, and it sums the resulting powers of two with
a counting circuit rather than a general adder tree.

This repository holds synthesizable SystemVerilog for that engine: the
one-offset encoder, the per-lane pair sequencer, the processing element (PE)
with its concatenating adder tree, the 2-D tile of PEs, and a core wrapper
with set grouping and performance counters. Each module has a self-checking
testbench.

## 1. One-offsets

`lac_term_encoder` recodes a 16-bit two's-complement value into a digit
vector with digits in {-1, 0, +1}. It returns two 16-bit masks: `nz` marks the
non-zero digits and `neg` gives their signs (1 = minus). Each non-zero digit is
one one-offset `(sign, t)`, with `t` in 0..15 kept in 4 bits.

By default the recoding is the non-adjacent (canonical signed-digit) form, a
Booth-style recoding with no two neighbouring non-zero digits. It is computed
by a ripple over the bits with a carry `c`:

| `x[i] + c` | next bit `x[i+1]` | digit | new carry |
|---|---|---|---|
| 0 | - | 0 | 0 |
| 1 | 0 | +1 | 0 |
| 1 | 1 | -1 | 1 |
| 2 | - | 0 | 1 |

For every 16-bit signed value the digits stay in positions 0..15, and a value
has at most 8 one-offsets. Examples: `-2 -> (-,1)`, `7 -> (+,3)(-,0)`. With
`POSITIONAL = 1` the plain two's-complement bits are used instead, with bit 15
taken as the one-offset `-2^15`. This is slower (up to 16 one-offsets) but
needs no recoding. Zero has no one-offsets at all, so a zero activation or
weight costs no PE cycles.

The source of the method names the representation only as "Booth-encoded".
The minimal form was chosen here. Plain radix-2 Booth recoding would also
match its examples, but produces more one-offsets for some values.

## 2. The processing element

A PE (`lac_pe`) has 16 lanes. Every cycle lane `i` delivers one activation
one-offset `(s'_i, t'_i)` and one weight one-offset `(s_i, t_i)`, each with a
valid flag. The PE adds all 16 products `(-1)^(s_i xor s'_i) * 2^(t_i + t'_i)`
to its accumulator. It does so in six steps, all combinational here except the
last:

1. **Exponent and sign.** A 4-bit + 4-bit adder gives the 5-bit exponent
   `E_i`, and an XOR gives the sign.
2. **One-hot.** A 5-to-32 decoder turns `E_i` into `2^E_i`. A lane without a
   valid pair decodes to all zeros.
3. **Histogram.** For every power `2^j` (j = 0..31) a signed count `N^j` of
   the products equal to `+2^j`, minus those equal to `-2^j`. With 16 lanes
   `N^j` lies in [-16, 16] and fits 6-bit two's complement.
4. **Concatenation** and
5. **reduction** to `psum = sum_j N^j * 2^j`, 38 bits. See below.
6. **Accumulation.** `acc <= acc + psum`.

### Why the adder tree can concatenate

Adding 32 counts, each shifted by its own power, would take a 32-input adder
of 37-bit words. Instead, notice that `N^(j+6) << (j+6)` and `N^j << j` cannot
overlap: the lower one only occupies 6 bits. So their sum is a
concatenation. The one catch is that a negative lower part borrows one from
the upper part:

    (N_hi << n) + L  =  { N_hi - sign(L), L }      (L an n-bit signed value)

`lac_concat_unit` applies this as a chain: `N^0` with `N^6`, then that 12-bit
result with `N^12`, and so on. This folds all counts with the same index
modulo 6 into one word with no carry chain, just one 6-bit decrement per
stage. Because a count is at most 16 in magnitude, `N_hi - 1` always fits in
6 bits. `lac_adder_tree` builds the six groups

    G0 = {N30,N24,N18,N12,N6,N0}   G1 = {N31,N25,N19,N13,N7,N1}   36 bits
    G2 = {N26,N20,N14,N8,N2}  G3 = {N27,...,N3}  G4 = {...,N4}  G5 = {...,N5}  30 bits

and adds `G0 + (G1<<1) + ... + (G5<<5)` in one six-input adder, giving the
38-bit partial sum. `N31` is always zero, since the largest exponent is 30,
but it is kept so that the groups match the 32-bucket form. Setting
`NAIVE_TREE = 1` selects the plain 32-input shift-and-add form. It gives the
same result and is useful as a reference.

### Accumulator control

When `en` is high the partial sum is accumulated. If `flush` is high as well,
`acc + psum` goes to the `result` register and the accumulator restarts from
zero. The next output can then start in the very next cycle. `ACC_W`
(default 48) is this design's choice. A 16-bit product is below `2^30` in
magnitude, so 48 bits hold the sum of more than 2^17 products.

## 3. Lanes, sets and the tile

A lane must see every pair of its activation's and weight's one-offsets.
`lac_term_sequencer` holds three masks per lane: the remaining activation
one-offsets, the weight's full one-offset set, and the remaining weight
one-offsets. Each cycle it presents the lowest remaining activation one-offset
together with the lowest remaining weight one-offset, then drops that weight
one-offset. When the weight mask runs out, it drops the activation one-offset
and reloads the weight mask. A lane therefore finishes after exactly
`t_a x t_w` cycles, and its `last` output rises on the final pair.

`lac_tile` is a `FILTERS x WINDOWS` array of PEs (default 8 x 16, the
arrangement of the source's tile). A **set** is 16 activations for each
window and 16 weights for each filter:

* PE (f, w) multiplies window `w`'s activations by filter `f`'s weights. A
  column of PEs shares activations and a row shares weights.
* Every input value goes through an encoder. Every lane of every PE has its
  own sequencer, so lanes advance independently.
* A set takes `T = max over all 2048 lanes of t_a x t_w` cycles (one cycle if
  no lane has work). The tile starts the next set only when every lane is
  finished, so the slowest lane sets the pace. This cross-lane and
  cross-filter imbalance is the main loss against the ideal work reduction.
* `in_ready` is high when the array is idle, or when every lane is on its
  final pair. The next set is therefore loaded in the same cycle as the last
  pairs of the current one, and sets follow each other with no bubble.

`in_last` marks the final set of an **output group**. When that set
finishes, every PE flushes its accumulator into its `result` register, which
drives `out_data[f][w]`. `out_valid` stays high until `out_ready`. If a group
finishes while the previous group's results are still waiting, the whole
array stalls on its final pairs (`stall` = 1) until the outputs are taken.
Assertions in the tile check that waiting outputs hold still, and that a set
is never loaded into a busy array.

Timing: a set accepted at clock edge `k` has its pairs processed at edges
`k+1 .. k+T`. A group's outputs are valid from edge `k+T` of its last set.

## 4. The core (`lac_top`)

`lac_top` wraps one tile. The activation and weight memories and the
activation buffers are outside it, so their data and handshakes are its ports:

| port | width | meaning |
|---|---|---|
| `cfg_sets` | 16 | sets per output group (>= 1); for a convolution, `ceil(c*h*k / 16)` |
| `in_valid`, `in_ready` | 1 | set handshake |
| `act` | 16 x 16 x 16 | activations `[window][lane]` |
| `wgt` | FILTERS x 16 x 16 | weights `[filter][lane]` |
| `out_valid`, `out_ready` | 1 | output-group handshake |
| `out_data` | FILTERS x 16 x ACC_W | `[filter][window]` output activations |
| `cnt_sets`, `cnt_busy`, `cnt_stall`, `cnt_groups` | 32 | accepted sets, cycles with pairs processed, back-pressure cycles, groups delivered |

A counter of accepted sets derives `in_last` from `cfg_sets`. `cfg_sets` may
change between groups. Mapping a layer onto sets (which 16 channels form a
lane group, which 16 windows form a column group, how many filters there are)
is left to whatever feeds the memories.

Configurations: the weight interface carries one value per filter lane, so
`FILTERS = 8, 16, 32, 64` correspond to the source's 128-, 256-, 512- and
1K-wire weight interfaces. The activation side always carries 256 values.
The default is the 8-filter, 128-wire tile.

## 5. Where this RTL departs from, or adds to, the source design

* **Scheduling of pairs.** The source states that a set takes the maximum
  `t_a x t_w` over the PEs, but not how pairs are ordered or how activations
  reach each lane. Giving every lane its own copy of the activation's
  remaining one-offsets is this design's way to reach exactly that bound. It
  costs about 80 flip-flops per lane.
* **Memory interface.** All values of a set arrive in parallel on one cycle.
  The source counts one wire per weight on the weight-memory interface but
  does not describe the serial transfer, so it is not modelled.
* **Not built:** the activation and weight memories (eDRAM) and the input and
  output activation buffers (SRAM). The source gives no sizes for them. Also
  not built is a "MAX" block drawn in the source's accumulation stage, whose
  function is not described.
* **Widths the source leaves open or states inconsistently.** The accumulator
  is 48 bits. The source's PE figure labels the partial output 42 or 43 bits,
  whereas its text and the enhanced-tree figure give 38 bits, which is the
  value used here.
* **Handshakes, reset and counters** are this design's own. All registers use
  an asynchronous active-low reset.
* The source's baseline (bit-parallel, 2K-wire) accelerator is only a point
  of comparison and is not included.

## 6. Files, simulation and verification

`rtl/`: `lac_pkg` (constants, the `term_t` and `digits_t` types),
`lac_term_encoder`, `lac_term_sequencer`, `lac_concat_unit`,
`lac_adder_tree`, `lac_pe`, `lac_tile`, `lac_top`.

`tb/`: one `tb_<module>` per module, plus `lac_tb_pkg` (an independent
one-offset count, and random values with a chosen precision). Each testbench
prints `TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_lac_term_encoder`: about 3000 values against a division-based reference
  recoding.
* `tb_lac_concat_unit`, `tb_lac_adder_tree`: random and extreme counts
  against integer sums.
* `tb_lac_pe`: random pairs, both tree variants, partial sum, accumulator and
  flush.
* `tb_lac_term_sequencer`: products and pair counts, with random stalls.
* `tb_lac_tile` (3 x 2 array): output groups; exact cycles per set under
  back-to-back streaming; stalls under back-pressure.
* `tb_lac_top`: the full default size, 96 sets in groups of 1 to 4, with
  precisions like real CNN layers. It checks every output, the set timing and
  the counters. It also requires that multi-set groups, a change of group
  length, an empty set, lane imbalance, back-to-back acceptance and an output
  stall each occur at least once.
* `tb_lac_worked_example`: the source's own 4-bit example. It is a 4 x 4
  array with two activation/weight pairs per PE and positional one-offsets.
  The slowest pair, activation 6 = (2,1) with weight 7 = (2,1,0), sets
  T = 6 cycles, against 16 for the bit-parallel engine. The same set in the
  signed-digit form takes 4 cycles.
* `tb_lac_conv_layers`: one output row (16 windows) of a 32-channel 3x3
  convolution for each of six CNN precision profiles, at the default size.
  The profiles use the first-layer activation precisions and the weight
  precisions of AlexNet, GoogLeNet, VGG-S, VGG-M and pruned AlexNet and
  ResNet-50; the pruned ones have two thirds of their weights zero. Windows
  map to columns. The (ky, kx, channel) volume is cut into 16-lane sets. The
  outputs are checked against a direct convolution, and the cycle counts are
  printed next to those of a 16-lane x 8-filter bit-parallel engine. The data
  are uniformly random within each precision, which gives far more
  one-offsets per value than real activations and weights. These cycle counts
  are therefore a pessimistic check of function, not a performance estimate.

Running a testbench with plain Verilator 5:

    verilator --binary --timing --assert -j 4 --top-module tb_lac_top \
        -y rtl -y tb +libext+.sv -Irtl -Itb rtl/lac_pkg.sv tb/lac_tb_pkg.sv tb/tb_lac_top.sv
    ./obj_dir/Vtb_lac_top

(Omit `tb/lac_tb_pkg.sv` for the testbenches that do not import it.) At the
default size the core takes about two minutes to build and a few seconds to
run.

Changing the design: `FILTERS` and `WINDOWS` on `lac_top`/`lac_tile` set the
array size. `ACC_W` sets the accumulator width, `POSITIONAL` selects plain
binary one-offsets, and `NAIVE_TREE` on `lac_pe` selects the plain reduction.
The lane count (16) and the value width (16 bits) are package constants,
because the histogram and the concatenation groups are built around them.
