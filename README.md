# ADiP: an adaptive-precision systolic array in SystemVerilog

Quantised transformer models keep activations at 8 bits but often store
weights in 4 or 2 bits (BitNet-style ternary weights, for instance). A
conventional 8-bit systolic array gains nothing from the narrower weights. The
ADiP array can. Each processing element (PE) is built from sixteen 2-bit
multipliers, enough for one 8-bit × 8-bit product per cycle. When the weights
are narrower, the same multipliers work on two or four *different* weight
matrices at once, all multiplied by the same activation row. At equal clock
and array size the array therefore does 2× (8b×4b) or 4× (8b×2b) the work of
8b×8b. It also reads each activation tile once for two or four weight
matrices. The default configuration is a 64×64 array (4096 PEs). At 1 GHz this
gives 8.192, 16.384 and 32.768 TOPS in the three modes.

The RTL follows the architecture published as *ADiP: Adaptive-Precision
Systolic Array for Matrix Multiplication Acceleration* (Abdelmaksoud, Sestito,
Wang, Prodromakis). Where that description stops, this design makes its own
choices. Each module's header comment lists them, and the section
"Departures and open points" below sums them up.

## What the core computes

`adip_top` multiplies a stream of activation rows `A[i][0..N-1]` by a
stationary N×N weight tile:

| mode       | weights held in the array         | results per column per row                 |
|------------|-----------------------------------|--------------------------------------------|
| `MODE_8X8` | one tile of signed 8-bit weights  | 1: `C[i][c] = Σ_k A[i][k]·W1[k][c]`         |
| `MODE_8X4` | two tiles of signed 4-bit weights | 2: one per tile                            |
| `MODE_8X2` | up to four tiles of 2-bit weights | 4: one per tile (unused tiles give 0)      |

All values are two's complement. A 2-bit weight covers -2..1, which includes
the ternary set {-1, 0, 1}. The three-tile case (`n_tiles = 3` in `MODE_8X2`)
is meant for Q, K and V projections that share one input: their weight tiles
are loaded together, and one pass over X produces all three.

The array always consumes one activation row per cycle, whatever the mode. The
2× and 4× gains come from the wider results, not from a faster row rate.

## The PE: one 8-bit weight register, four 2-bit digits

The key idea is to treat the 8-bit weight register as four 2-bit digits,
`w[1:0]`, `w[3:2]`, `w[5:4]` and `w[7:6]`, and give each digit its own group of
four 2-bit multipliers (`adip_pe`, `adip_mul2`):

* Group *g* multiplies the whole 8-bit activation by digit *g*. The activation
  is split into four 2-bit digits, and the four digit products are added with
  fixed shifts of 0, 2, 4 and 6. This yields an exact 10-bit
  8-bit × 2-bit product.
* Each group product is added to its own **psum lane** *g*, which comes down
  from the PE above, and the sum is registered. A PE therefore passes four
  lanes downwards, not one result.
* The mode never changes this datapath. It only decides which digits are
  *signed*. In 8b×8b only digit 3 is (it is the top of one 8-bit number). In
  8b×4b digits 1 and 3 are (the tops of two 4-bit numbers). In 8b×2b all four
  are. The most significant activation digit is always signed.

The packing follows from this. Tile 1 takes the low bits of the weight
register, tile 2 the next and so on:

```
MODE_8X8:  w = W1[7:0]
MODE_8X4:  w = { W2[3:0], W1[3:0] }
MODE_8X2:  w = { W4[1:0], W3[1:0], W2[1:0], W1[1:0] }
```

The lane-to-weight mapping (group *g* ↔ `W1[2g+1:2g]`, or `W1[1:0]`,
`W1[3:2]`, `W2[1:0]`, `W2[3:2]`, or `W1..W4[1:0]`) is the one the paper
gives. Putting tile 1 in the low bits is this design's choice, and it is what
lets group *g* always read `w[2g+1:2g]`.

## Recombining lanes: the shared column unit

A lane holds `Σ_rows activation × digit_g`. It must be shifted by the digit's
position and added to its neighbours. This is needed only once per column, at
the bottom, so one `adip_shift_acc` unit serves a whole column instead of
sitting in every PE:

```
lanes l0..l3 ──► shifters (<<) ──► stage 1: s0 = l0'+l1', s1 = l2'+l3' ──► stage 2: s0+s1
     │                                  │                                       │
  8b×2b: 4 results                 8b×4b: 2 results                      8b×8b: 1 result
  (0 cycles)                       (1 cycle)                             (2 cycles)
```

The shifts are `2g` in 8b×8b, `2·(g mod 2)` in 8b×4b and none in 8b×2b. The
output is tapped at the point that matches the mode. A register follows each
adder stage, so the unit adds E = 2, 1 or 0 cycles of latency.

## Dataflow: diagonal inputs and permuted weights

`adip_array` arranges N×N PEs without the skew FIFOs that a weight-stationary
array normally needs at its input and output edges:

* A whole activation row enters the top PE row in one cycle, element *c* into
  column *c*.
* Each PE registers its activation and hands it to the next row **one column
  to the left**. The leftmost PE of a row feeds the rightmost PE of the next
  row. Row *r* of column *c* therefore multiplies activation element
  `(c + r) mod N`.
* Psum lanes go straight down. The bottom of column *c* thus receives
  `Σ_r A[i][(c+r) mod N] · Wst[r][c]`.

For this to equal `Σ_k A[i][k] · W[k][c]`, the stored tile must be
`Wst[r][c] = W[(r + c) mod N][c]`. That is, each column of W is rotated
upward by its own index. This is the **permutation** step. In the 8b×4b and
8b×2b modes the permuted tiles are then **interleaved**: the elements at the
same position are cut to 4 or 2 bits and concatenated as shown above.

`adip_weight_prep` does both steps at run time. It has one memory bank per
array column, and each bank holds up to four tiles written in their natural
row order. During a load, bank *c* is read at its own address
`(r + c) mod N`, so the permutation costs nothing. One packer per
column does the interleaving. The N packed words then shift down the columns,
bottom row first, over N cycles. The weight words must already be quantised:
4-bit and 2-bit weights are truncated to their low bits, not saturated.

All N results of an input row leave the bottom of the array in the same cycle.
No output deskew is needed.

## Timing

With `out_ready` held high:

* a row accepted in cycle *t* gives its results in cycle `t + N + 1 + E`
  (input register, N psum registers, E column stages);
* a tile of N rows sent back to back finishes `2N + E` cycles after its first
  row. This is the paper's latency model `N·⌈…⌉ + N + S + E − 2`, with one
  cycle per PE (sixteen multipliers), S = 2 (the PE's input and psum
  registers) and E = 2/1/0;
* a weight load with `load_start` in cycle *t* presents the N packed words
  in cycles t+2 … t+N+1 (one registered bank read, then one word per
  cycle). `loaded` is high from cycle t+N+3.

Both latencies are checked cycle-exactly by the testbenches.

## Using `adip_top`

| port group                                  | use |
|---------------------------------------------|-----|
| `wr_en, wr_tile, wr_row, wr_data[N]`        | write row `wr_row` of tile `wr_tile` (0..3) in natural order |
| `load_start, mode, n_tiles` / `load_ready, loaded, mode_q` | start a load. It is taken only while `load_ready` is high (no load running, no row in flight). The mode is latched until the next load |
| `in_valid, in_ready, in_data[N], psum_in[N][4]` | one activation row per accepted cycle. `psum_in` is added to the four lanes of each column for the same row: drive 0 for a plain product, or use it as a per-lane bias |
| `out_ready, out_valid, out_data[N][4]`      | results. `out_data[c][t]` is tile *t*'s result for column *c*. While `out_ready` is low, every input and psum register in the array holds (stall) |

Default widths at N = 64: psum lanes are 16 bits (10 + log2 N) and results are
22 bits (16 + log2 N). These hold the exact sum of N full-range products.
A non-zero `psum_in` can overflow them; values wrap.

Summing partial products over several K tiles (block matrix multiplication)
is left to the surrounding system. The core produces one K-tile partial
product per row.

## Files

| file | content |
|------|---------|
| `rtl/adip_pkg.sv`          | mode enum, widths, digit-sign / shift / latency helpers |
| `rtl/adip_mul2.sv`         | 2-bit × 2-bit multiplier with per-operand sign control |
| `rtl/adip_pe.sv`           | reconfigurable PE |
| `rtl/adip_array.sv`        | N×N grid with diagonal, wrap-around input links |
| `rtl/adip_shift_acc.sv`    | shared column shifters/accumulators |
| `rtl/adip_weight_prep.sv`  | banked weight store, permutation, interleaving, loading |
| `rtl/adip_top.sv`          | the core |
| `tb/tb_*.sv`               | self-checking testbenches, one per module |

## Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=… failures=…`
and stops itself with a watchdog. For example, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_adip_top rtl/adip_pkg.sv tb/tb_adip_top.sv
./obj_dir/Vtb_adip_top
```

* `tb_adip_mul2`: exhaustive over all digits and signedness combinations.
* `tb_adip_pe`: random operands in all modes, plus register enables.
* `tb_adip_array` (N = 6): random tiles, rows, bubbles and stalls, against an
  integer model of the diagonal dataflow.
* `tb_adip_shift_acc`: all three taps with their latencies.
* `tb_adip_weight_prep` (N = 8): permutation and packing for every mode and
  tile count.
* `tb_adip_top` (N = 8): end to end against plain matrix products on the
  unpermuted tiles. It uses every mode, the three-tile case, bubbles, output
  stalls, `psum_in`, refused loads and mode switches (each is counted and
  required), and checks row and tile latencies exactly.
* `tb_adip_top_full`: the same checks at the default 64×64 size, one complete
  tile in each mode. It takes a few minutes, most of it in compilation.
* `tb_adip_workloads`: attention-layer slices at 64×64, built as block
  products with the K-tile partial sums added in the testbench. It covers a
  ternary Q/K/V projection (three matrices in one 8b×2b load), a 4-bit
  projection for two heads (8b×4b) and an 8b×8b attention-score product.
  Each tile pass must take exactly `rows + N + 1 + E` cycles from load to the
  last result.

To change the array size, override `N` on `adip_top` (4 to 64 are the sizes
the original design space covers). The 64×64 array is 4096 PEs and 65,536
2-bit multipliers, so expect long compile and lint times at that size.

## Departures and open points

* **Signed arithmetic.** The architecture description never says whether the
  operands are signed. Here everything is two's complement, which is handled
  by per-digit sign control in the 2-bit multipliers.
* **Bit packing and quantisation.** Tile 1 goes in the least significant bits.
  "Converting" a weight to 4 or 2 bits is plain truncation, so weights must
  already be quantised.
* **Weight store.** The original mentions multi-bank memories rescheduled at
  run time, but no organisation. The bank-per-column register array, its write
  port and the load handshake are this design's. The original performs the
  preprocessing offline for weight matrices and at run time only for
  activation-to-activation products; here the same run-time path serves both.
* **Column unit pipeline.** A register after each adder stage, which makes
  E mode dependent, is a choice made here. So are the valid/stall tracking and
  the single global stall.
* **Handshakes.** Row streaming, back-pressure, the rule that a load waits for
  an empty pipeline, and the `psum_in` alignment register were all added to
  make the core usable. None of them is part of the published description.
* **Not included.** The activation and output memories, the host, and the
  accumulation across K tiles. The paper gives no design for them.
* **Not verified here.** Timing closure at 1 GHz, area and power. Those figures
  come from the original physical implementation in a 22 nm process, which
  RTL alone cannot reproduce.
