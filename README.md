# A tiled LUTNet layer engine in SystemVerilog

A binarised neural network (BNN) multiplies every ±1 activation by a ±1
weight with an XNOR gate and adds the products with a popcount. On an FPGA
that wastes the logic: the basic cell is a K-input lookup table (K-LUT) that
can compute *any* Boolean function of K inputs, not just an XNOR of two.
LUTNet (Wang, Davis, Cheung and Constantinides, IEEE Transactions on
Computers) replaces each XNOR with a K-LUT whose function is learned during
training and which sees K of the layer's inputs instead of one. Each node is
then far more expressive, so the network can be pruned much harder, and the
popcount trees, which dominate the area of an unrolled BNN layer, shrink
with it.

This repository gives register-transfer-level SystemVerilog for one LUTNet
layer: the array of learned LUTs, the popcount and accumulator that sum
their outputs, the RAM that feeds the tiled variant, the activation, and the
control that steps the array through its tiles. Its default configuration is
the article's main tiled design point: the sixth convolution of the CNV
network (CIFAR-10/SVHN) as a (5,1)-LUTNet layer, tiled 8 × 8, with 64.6 % of
its nodes pruned.

## The layer equation

For one output channel with N binary inputs x, a BNN computes
`y = f(Σ_n w_n·x_n)`. LUTNet computes

    y = f( Σ_{t=1..T} Σ_{m=1..Ñ/T} g_m( x~(m,t), p~(m,t) ) )

* `g_m` is a learned Boolean function of K inputs, mapped one-to-one onto a
  K-LUT; its truth table (the LUT *mask*) is fixed after training.
* `x~(m,t)` are the K−P activation inputs of node m while it works on tile t.
  The first one is the node's original BNN connection; the others are
  further inputs from the same convolution window, chosen at random during
  training and each used at most once per LUT.
* `p~(m,t)` are P further inputs that carry learned *parameters*, stored in
  RAM, one set per node per tile. With the select bits a single LUT behaves
  as 2^P different (K−P)-input functions, one chosen per use.
* The layer is *tiled* T = TI·TO ways: TI over its inputs, TO over its
  outputs. A physical array of (N/TI) × (C/TO) LUTs is reused TI·TO times per
  input vector. Area and throughput both scale with 1/(TI·TO).

With P = 0 and T = 1 the equation is the *unrolled* LUTNet layer, one LUT per
surviving connection and no RAM; the same RTL builds that variant.

Every binary value in the RTL is one bit, `1` meaning +1 and `0` meaning −1.

## The (K,P)-LUT (`kp_lut`)

A (K,P)-LUT is a K-LUT seen as 2^P sub-tables of 2^(K−P) entries. All
sub-tables share the activation inputs; the P parameter bits choose one of
their outputs with a multiplexer. The mask address is `{p, x}`:
activation input 1 (the original connection) is address bit 0, the
parameter bits are the top P address bits, so sub-table s is mask bits
`[s·2^(K−P) +: 2^(K−P)]`. The article's equation lists the inputs as x then
p; its drawing of the (3,1) node splits the mask on the *first* index and
feeds p to the multiplexer. The address order here follows the drawing's
structure; with another order the masks produced by training would only have
to be permuted.

A (K,P) pair is accepted only if the 2^(2^(K−P)) functions a sub-table can
hold are at least as many as the 2^P selections, i.e. `2^(K−P) ≥ P`.
Elaboration stops with an error otherwise. For 6-input LUTs this allows P up
to 4 (K=6), 3 (K=5), 2 (K=3, 4) and 1 (K=2).

## How one input vector flows through the tiles

The engine (`lutnet_layer`) takes an N_IN-bit vector, for a convolution the
flattened 3×3×256 window of 2304 bits, and produces C_OUT = 256 output bits.
With ROWS = N_IN/TI = 288 and COLS = C_OUT/TO = 32:

* **Input tile ti** is bits `[ti·ROWS +: ROWS]` of the buffered vector.
* **Column j** of the LUT array serves output channels j, COLS+j, 2·COLS+j, …:
  output channel `c = to·COLS + j`.
* **Node (i, j)** (index `j·ROWS + i`) takes tile element i as its first
  input and K−P−1 other, distinct elements of the same tile as its further
  inputs. Its wiring is the same for every tile, so a node meets element i of
  tile 0, then element i of tile 1, and so on. It gets fresh p bits every
  step.
* **Tile step (to, ti)** reads RAM word `to·TI + ti`, holding P bits for
  every node, and presents tile ti to the array. Each column's popcount counts
  the +1 outputs of its kept nodes.
* The sequencer runs `ti` in the inner loop and `to` in the outer one. The
  TI popcounts of a column therefore arrive back to back, and one
  accumulator per column (COLS in all) finishes channel `to·COLS + j` before
  moving on to the next output tile.

One vector takes TI·TO = 64 steps, one per clock:

    cycle      A        A+1 … A+64          A+65    A+66      A+67      A+68
    sequencer  accept   issue steps 0..63
    stage 1                  LUTs+popcount of step k in the cycle after its issue
    stage 2                       accumulate (load on ti=0, add otherwise)
    stage 3                            threshold output tile `to` after ti=TI-1
    output                                                              out_valid

A vector accepted in cycle A gives `out_valid` in cycle A + TI·TO + 4. The
next vector can be accepted in the cycle that issues the last step of the
current one, so a stream of vectors runs at exactly one per TI·TO cycles with
no bubble. The input vector is copied into a buffer on acceptance. The
previous one is no longer needed by then, because each step copies its tile
into the stage-1 register as it is issued.

## What is hardened and what is loaded

Training produces four tables. The engine treats them differently:

| table | where it lives | how it is set |
|---|---|---|
| LUT masks (2^K bits per node) | LUT contents | elaboration-time constants, `lutnet_pkg::node_mask` |
| wiring of node inputs | wires | elaboration-time constants, `lutnet_pkg::node_conn` |
| pruning (which nodes exist) | presence of the LUT | elaboration-time constants, `lutnet_pkg::node_kept` |
| p bits | `param_ram`, TI·TO words × (nodes·P) bits | loaded at run time, `pram_wr_*` |
| activation thresholds | `threshold_unit`, C_OUT words | loaded at run time, `thr_wr_*` |

Hardening the masks and wiring is the core of LUTNet: logic synthesis folds
each learned function into a physical LUT, and a pruned node costs nothing,
not even a popcount input. In this code the three hardened tables come from
a seeded integer hash in `lutnet_pkg`. They are stand-ins that give the
design realistic structure (random masks, random wiring within the tile,
pruning at the requested density) without a trained network. To build a
trained layer, replace the bodies of those three functions with lookups into
the trained tables, for example a generated package of constants. No other
file changes.

The p bits and thresholds are ordinary memory contents. Neither memory has a
reset, so both must be written before the first vector. A pruned node keeps
its slot in the RAM word, so the word layout does not depend on the pruning;
those bits are never read.

## The activation

The article places the activation block after the adders. It specifies a
batch-normalisation layer after every layer but does not describe the
hardware. Here batch normalisation, the layer scaling factor and the sign
function are folded into one threshold per channel, applied to the count of
+1 terms: the output is +1 when the count is at least the threshold. With
K_c kept terms in channel c, a ±1 sum S relates to the count by
`S = 2·count − K_c`, so any affine normalisation followed by sign becomes
`count ≥ threshold` (or `≤` for a negative scale; fold that into the mask
polarity or extend the comparator).

## Default configuration and size

| parameter | default | meaning |
|---|---|---|
| `N_IN` | 2304 | inputs per output channel (3×3 window × 256 channels) |
| `C_OUT` | 256 | output channels |
| `K`, `P` | 5, 1 | LUT inputs; of those, fed from RAM |
| `TI`, `TO` | 8, 8 | input and output tiling |
| `DENSITY_PM` | 354 | kept nodes per thousand (64.6 % pruned) |
| `SEED` | 1 | seed of the placeholder tables |

This gives an array of 288 × 32 = 9216 node positions (3293 kept with seed
1), a 64 × 9216-bit parameter RAM, 32 popcounts of 288 bits, 32 accumulators
of 12 bits and 256 thresholds of 12 bits. Generic synthesis of the whole
engine gives about 26.8 k word-level cells, 3.5 k flip-flop bits and 698 k
memory bits: the 590 k-bit parameter RAM, 105 k mask bits that map into
LUTs, and 3 k threshold bits.

Other design points of the article are parameter changes to the same RTL:

* **Other (K,P)**, for example (3,1), (4,2), (6,4): set `K`, `P`.
* **Other tilings**, for example (8,4), (16,8): set `TI`, `TO`. They must
  divide `N_IN` and `C_OUT`.
* **Unrolled (K,0)-LUTNet**: `P = 0`, `TI = TO = 1`. The RAM is not built,
  the `pram_*` ports are ignored, and a vector is accepted every cycle. The
  unrolled CNV layer needs 589,824 node positions, far more than the tiled
  one.
* **Other layers**: set `N_IN`, `C_OUT`. An LFC hidden layer, for example,
  has 256 inputs and 256 outputs.

## Interface of `lutnet_layer`

| port | dir | width | |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset of the control |
| `in_valid`, `in_ready`, `in_data` | in/out/in | 1/1/N_IN | input vector, transferred when valid and ready |
| `out_valid`, `out_data` | out | 1/C_OUT | one-cycle result pulse, no back-pressure |
| `pram_wr_en/addr/data` | in | 1/log2(TI·TO)/nodes·P | write one RAM word (step to·TI+ti) |
| `thr_wr_en/addr/data` | in | 1/log2(C_OUT)/log2(N_IN+1) | write one channel threshold |

Write the memories only while no vector is in flight if the results must
reflect the new contents exactly.

## Where this departs from, or goes beyond, the article

* **Not in the article, chosen here:** the loop order, the four-stage
  pipeline, the handshakes, the synchronous one-cycle RAM, the RAM word
  layout, the load-on-first accumulator, the threshold form of the
  activation, and loading p bits and thresholds through write ports (the
  article's FPGA memories are learned and would be preset by the
  bitstream).
* **Popcount width:** the article's figures label the popcount output
  ⌈log2 Ñ⌉ bits (⌈log2 Ñ/T⌉ when tiled). The RTL uses ⌈log2(n+1)⌉ for n
  inputs, which also holds the all-ones count, and an accumulator of
  ⌈log2(N_IN+1)⌉ bits, which holds the count over all TI tiles.
* **Same wiring for every tile:** a node's inputs are fixed positions within
  the current tile. The article draws the tile elements streaming over one
  LUT input but does not say how the extra inputs are chosen across tiles.
* **One bit per value:** training in the article uses two-level residual
  binarisation (B = 2). It does not describe how the two levels appear in a
  LUTNet layer's hardware, so the engine takes one bit per input and
  produces one bit per output.
* **Not included:** the rest of the networks. The article generates
  sliding-window units, pooling, the non-LUTNet layers and the surrounding
  dataflow from high-level-synthesis templates of earlier BNN work and does
  not design them. The training and table-generation software is not
  included either. The physical packing of two small logical LUTs into one
  6-LUT is left to FPGA synthesis.
* **Placeholder network:** the hardened tables are seeded random stand-ins,
  not a trained CNV layer. The RTL and its tests show that the engine
  computes the LUTNet equation for the tables it is given, not that it
  reaches any accuracy.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

* `tb_kp_lut`: (5,1), (6,2) and (3,0) LUTs driven through every input
  combination; outputs are checked against the mask and the sub-table view.
* `tb_lut_array`: every node of a 16 × 4 (5,1) array checked against the
  tables for random tiles and p bits; also the wiring rules and that both
  kept and pruned nodes occur.
* `tb_popcount`, `tb_accumulator`, `tb_param_ram` (including read latency),
  `tb_threshold_unit` (values on, below and above each threshold) and
  `tb_tile_sequencer` (step order, first/last marks, TI·TO spacing of
  back-to-back vectors).
* `tb_lutnet_layer` (96 inputs, 16 outputs, (5,1), 4×2 tiles),
  `tb_lutnet_layer_k6p4` ((6,4), 2×4 tiles), `tb_lutnet_layer_ti16`
  (256 inputs as in an LFC hidden layer, 32 outputs, (4,2), 16×8 tiles),
  `tb_lutnet_layer_unrolled` ((4,0), untiled) and `tb_lutnet_layer_full`
  (all defaults) share
  `lutnet_layer_tb_body.svh`. A reference model evaluates the layer
  equation node by node and is compared with every output vector. Each test
  also checks the latency and spacing, and counts back-to-back and idle input
  cycles, RAM and threshold rewrites between vectors, both output values,
  both p values and pruned nodes. It fails if any of them never happens.

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl \
        rtl/lutnet_pkg.sv tb/tb_lutnet_layer.sv --top-module tb_lutnet_layer
    ./obj_dir/Vtb_lutnet_layer

The full-size test builds in about a minute and needs about 2.5 GB of
memory; it simulates in well under a second.

## Files

    rtl/lutnet_pkg.sv       shared types, placeholder table functions
    rtl/kp_lut.sv           (K,P)-LUT inference operator
    rtl/lut_array.sv        hardened array of kp_lut nodes with wiring and pruning
    rtl/popcount.sv         column popcount
    rtl/accumulator.sv      per-column tile accumulator
    rtl/param_ram.sv        p-bit RAM, one word per tile step
    rtl/threshold_unit.sv   per-channel threshold activation
    rtl/tile_sequencer.sv   tile-step control and input handshake
    rtl/lutnet_layer.sv     the layer engine (top)
    tb/                     testbenches described above
