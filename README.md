# PACiM bank in SystemVerilog

A compute-in-memory (CiM) bank for 8-bit x 8-bit unsigned neural-network MACs
that does only a quarter of the bit-serial work exactly. The rest it
estimates from statistics. A dot product of length n breaks down into 64
binary MAC cycles (p,q): for each pair of an activation bit p and a weight
bit q, count the rows where both bits are 1, then weight that count by
2^(p+q). The bank runs the 16 cycles where both bits are among the 4 MSBs
exactly, in a digital SRAM array. For every other cycle it uses the expected
value of that count, Sx[p]·Sw[q]/n. Here Sx[p] is the number of activations
in the vector with bit p set, and Sw[q] the same count for the weights. This
is *probabilistic approximate computation* (PAC). It turns a length-n vector
operation into one multiply and one divide.

This removes two kinds of data:

* the array needs no memory columns for the 4 weight LSBs;
* the 4 activation LSBs never have to be stored or moved. From each output
  vector the bank keeps only the 4 MSBs plus eight 13-bit counts of ones per
  bit index. An on-die encoder computes these counts as results are
  produced. They are exactly the Sx the next layer needs.

This RTL implements one bank as the PACiM architecture describes it
(W. Zhang et al., "PACiM: A Sparsity-Centric Hybrid Compute-in-Memory
Architecture via Probabilistic Approximation"). That description gives the
block structure, the sizes and the arithmetic. Control, interfaces, widths,
rounding and timing are not specified there; the choices made here are
listed in "Departures and own choices" below.

## The hybrid MAC

For an output channel c with DP length n:

    O_c ≈  Σ_{(p,q) ∈ D}  2^(p+q) · Σ_r x_r[p]·w_rc[q]          (exact, D-CiM array)
         + Σ_{(p,q) ∉ D}  2^(p+q) · round(Sx[p]·Sw_c[q] / n)     (PAC, sparsity domain)

The *computing map* D is the set of digital cycles. It always lies inside
the MSB × MSB square (p,q ≥ 4), and a *boundary level* 0..3 can shrink it:

| level | digital cycles D                         | count |
|-------|------------------------------------------|-------|
| 0     | all p,q ∈ {4..7}                          | 16    |
| 1     | as 0, minus x4·w4                         | 15    |
| 2     | as 1, minus x4·w5, x5·w4                  | 13    |
| 3     | as 2, minus x4·w6, x5·w5, x6·w4           | 10    |

In general, D = {(p,q) : p,q ≥ 4 and p+q ≥ 8 + level}
(`pacim_pkg::is_digital`). Every cycle outside D goes to the PAC
computation engine. That is 48, 49, 51 or 54 cycles.

The level comes from the *dynamic workload configuration*. Before any
computation, the bank forms SPEC = Σ_p 2^p·Sx[p]. This equals the sum of the
input activations, so SPEC/n is their mean and serves as an estimate of how
large the output will be. SPEC/n is compared with three thresholds:

* SPEC/n > TH2 gives level 0;
* TH1 < SPEC/n ≤ TH2 gives level 1;
* TH0 < SPEC/n ≤ TH1 gives level 2;
* SPEC/n ≤ TH0 gives level 3.

Outputs that are probably small therefore spend fewer cycles in the exact
domain. With `dyn_en` low the level is always 0 (plain 4-bit approximation).
The comparison is done as SPEC > TH·n, so no divider is needed. The
thresholds are 8-bit integers in activation units.

## Structure of the bank

```
            cache (outside)                     pacim_top
  ┌───────────────────────────┐   ┌───────────────────────────────────────────────┐
  │ weight MSB rows ──────────┼──►│ dcim_array (64 × mwc, adder_tree) ─► dcim_shift_acc ─┐
  │ act MSBs, Sx, command ────┼──►│ bank_logic (speculation)                        │   │
  │ Sw read port ◄────────────┼──►│ pce (6 × pcu, pce_shift_acc) ─────────────────┐ │   │
  │                           │   │                         result_buffer ◄───────┴─┼───┘
  │ act MSBs ◄────────────────┼───│ post_pipeline (BN, ReLU, quantise) ◄─ buffer    │
  │ sparsity ◄────────────────┼───│ sparsity_encoder ◄─► enc_buffer (16 states)     │
  └───────────────────────────┘   └───────────────────────────────────────────────┘
```

| file | block |
|------|-------|
| `rtl/pacim_pkg.sv` | sizes, types, computing-map functions, command struct |
| `rtl/adder_tree.sv` | balanced adder tree, 256 product bits → 9-bit count |
| `rtl/mwc.sv` | multi-bit weight column: 256 × 4 weight bits, bit select, NOR product, adder tree |
| `rtl/dcim_array.sv` | 64 MWCs (256 × 256 cells), row write, registered input driver |
| `rtl/dcim_shift_acc.sv` | 64 shift-and-accumulate lanes for the digital cycles |
| `rtl/pcu.sv` | PAC computing unit: Sx[8], Sw[8], n registers; multiply-divide |
| `rtl/pce_shift_acc.sv` | 6 shift-and-accumulate lanes with serial unload |
| `rtl/pce.sv` | PAC computation engine: channel groups, Sw fetch, approximate-cycle issue |
| `rtl/result_buffer.sv` | 64 partial sums, merges both domains and several tiles |
| `rtl/post_pipeline.sv` | batch norm, ReLU, quantisation to UINT8 |
| `rtl/sparsity_encoder.sv` | eight 13-bit ones-counters |
| `rtl/enc_buffer.sv` | intermediate encoding buffer, 16 saved counter states |
| `rtl/speculation.sv` | SPEC and the threshold comparison |
| `rtl/bank_logic.sv` | controller |
| `rtl/pacim_top.sv` | the bank |

Default sizes are the published ones:

* 256 rows and 64 MWCs of 4 bits each (a 256 × 256-cell array);
* 6 PCUs;
* 13-bit sparsity counts and DP length;
* a 16-entry intermediate encoding buffer.

## D-CiM array

Each MWC holds bits 7..4 of the weights of one output channel, one weight
per row. In a bit-serial cycle (p,q):

* the bit select `bs` = q−4 picks weight bit q in every row;
* the input driver presents bit p of every row's activation (`xin`);
* each row forms x AND w. As in the original circuit, this is a NOR of the
  inverted weight bit (the cell's Q-bar side) and the inverted input.
  Here the inversion sits in the input path;
* the adder tree adds the 256 products.

The input driver registers `xin`/`bs`, so the 64 sums (`sum_valid`) appear
one clock after `in_en`. `dcim_shift_acc` adds them, shifted by p+q, in the
following clock.

Weights are written one full row per clock:
`w_data[k*4 +: 4]` = bits 7..4 of the weight of MWC k.

## PAC computation engine

A PCU holds a register file with eight Sx, eight Sw and n, and computes one
term round(Sx[p]·Sw[q]/n) per clock, with one clock of latency. Rounding is
to nearest: (Sx·Sw + ⌊n/2⌋) / n. With n = 0 the term is 0. Since Sx, Sw ≤ n,
the term fits in 13 bits.

The published design has six PCUs, a number chosen so that the engine
keeps pace with the 64 accumulator outputs of one bank. How channels map onto the PCUs is not published.
Here the 64 channels are processed in 11 groups of 6 (the last group has
4), and each group goes through these steps:

1. **Fetch:** the Sw of each channel in the group is read from the cache
   through `sw_req`/`sw_ch`. The cache must answer on `sw_data` in the next
   clock.
2. **Compute:** every approximate (p,q) is issued to all six PCUs at once,
   one per clock in p-major order. The six weight sparsities stay in place
   (weight-stationary).
3. **Drain:** two clocks.
4. **Unload:** the six totals are sent to the buffer one per clock.

From `start` to `done` the engine takes
2 + 11·(2·6 + approximate cycles + 7) clocks: 739 at level 0, 805 at level 3.
The digital part of one tile takes about 20 clocks. At these sizes the PCE,
not the array, sets the time per output vector. The bank starts the PCE
together with the digital cycles of the last tile, so the two overlap.

## Buffer, pipeline and output

`result_buffer` keeps one signed 32-bit sum per channel.

* It takes the parallel transfer of all 64 digital totals and the
  sequential PCE results, even when both arrive in the same clock.
* It keeps accumulating until `first_tile` clears it. A DP longer than 256
  rows is therefore done in several 256-row *tiles*, with a weight update
  between them. A DP that is not a multiple of 256 is padded with zero
  activations.

The entries then pass, one per clock, through `post_pipeline`. The three
stages are:

1. BN: `y = acc·γ[c] + β[c]`, with signed 16-bit γ and signed 32-bit β;
2. ReLU;
3. `min((y + 2^(s−1)) >> s, 255)` with s = `qshift`.

Only bits 7..4 of each result leave the bank (`act_out_msb`). The full
8 bits go to the encoder.

## Sparsity encoding

`sparsity_encoder` counts the ones at each bit position over the
activations it sees. When the count is emitted (`sp_out_valid`/`sp_out`)
depends on `layer_mode`:

* **CONV:** one output vector is one pixel across the 64 channels. The
  counts are emitted and cleared after every output vector (pixel-wise
  encoding).
* **LINEAR:** counting continues across output vectors. The counts are
  emitted only for a command with `layer_last` (layer-wise encoding).

If a pixel has more than 64 output channels, the array must be reloaded
before that pixel's encoding is finished. A command with `enc_park` stores
the counters in `enc_buffer[enc_addr]` and clears them. A later command with
`enc_resume` loads them back before its outputs are counted. A pixel is
complete when the last of its passes emits.

## Operating the bank

Set these configuration inputs and keep them stable during an operation:
`n_len` (the DP length), `dyn_en`, `th0..th2`, `layer_mode`, `qshift`. Load
BN parameters with `bn_we`. Then, for each output vector and each of its
256-row tiles:

1. Write the tile's 256 weight rows (`w_we`, one row per clock).
2. Present the command, the tile's activation MSBs (`act_msb[r]` = bits 7..4)
   and the Sx of the *whole* vector. Hold `cmd_valid` until `cmd_ready`; the
   operands are latched on acceptance.
3. Wait for `done`.

The command (`cmd_t`) holds `first_tile`, `last_tile`, `enc_resume`,
`enc_park`, `enc_addr` and `layer_last`.

For each command, `bank_logic` runs these steps:

1. latch the operands and pick the level;
2. clear the buffer if `first_tile`; start the PCE if `last_tile`;
3. issue the 16/15/13/10 digital cycles, (7,7) first;
4. after two clocks, transfer the digital totals to the buffer;
5. for the last tile only: wait for the PCE; optionally resume the encoder;
   stream the 64 results through the pipeline; park or emit the encoder
   state.

`level` and `dig_cycles` report what the last command did.

## Departures and own choices

These follow the published description:

* the block set and all sizes;
* the NOR-based product with a bit-select transmission gate, and the adder
  tree;
* the operand-based computing map and its three dynamic levels;
* Sx·Sw/n per binary cycle;
* eight counters and a 16-deep intermediate buffer;
* pixel-wise and layer-wise encoding;
* returning only the activation MSBs.

These are choices of this RTL:

* the command interface and the whole control sequence;
* the Sw fetch port and the channel grouping in the PCE;
* rounding to nearest in the divider;
* 32-bit accumulators;
* the BN, ReLU and quantisation formulas;
* counter saturation;
* normalising SPEC by n, with 8-bit thresholds;
* the cycle order and every latency.

Two further points depart from or add to the original:

* The multi-bank tiling mentioned in the original (several banks sharing
  work so that no intermediate buffer is needed) is not built. Its network
  and schedule are not described. This is the single-bank system.
* The cache is outside the bank. The bank only defines its side of the
  interface.

Weights and activations are unsigned 8-bit integers, as the arithmetic is
formulated and as the evaluated networks are quantised.
Signed networks would need an offset scheme, and that is not covered here.

## Capacity

* A DP can be up to 8191 long (13-bit counters and `n_len`). That covers
  every CONV layer of ResNet-18/50 and VGG16 (at most 3·3·512 = 4608) and
  FC layers up to 4096 inputs.
* The first FC layer of VGG16 for ImageNet has 25088 inputs and would need
  15-bit counts (`SP_W`).
* A layer computed fully in 8 bits cannot run here, because the array has
  no LSB columns. This includes the first 3×3×3 layer, which the original
  system gives to a separate standard D-CiM.
* More than 64 output channels take several array loads. In CONV layers,
  at most 16 pixels can be parked at a time.

## Verification

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each one
compares against values computed in the testbench and ends with a line
`TB_RESULT checks=N failures=M`.

`tb_pacim_top` runs the bank at its default size against a reference model
written in the testbench: it acts as the cache and computes the exact MSB
part, the PAC terms, BN/ReLU/quantisation and the expected sparsity. It
covers all four levels, the static mode, two-tile and 16-tile (DP 4096)
outputs, a DP of 576 spread over three tiles with zero-padded rows,
park/resume, and CONV and LINEAR encoding, and counts each of these
mechanisms. On random uniform data the hybrid MAC is within about 0.06 %
RMS of the exact 8b × 8b MAC (946 checks).

`tb_pac_error` repeats the error study of the approximation on the
hardware: one weight column gives the exact binary MAC and one PCU gives
Sx·Sw/n, for DP lengths 256, 1024 and 4096 and three bit densities. The
RMS error matches the prediction for fixed counts of ones,
√(n·px(1−px)·pw(1−pw)). The relative error roughly halves for each
fourfold DP length, as the n^(−1/2) trend predicts. At DP 1024 the
measured error is 4.5 to 6.3 LSB, close to the roughly 6 LSB reported for
the original error study.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl \
        rtl/pacim_pkg.sv tb/tb_pacim_top.sv --top-module tb_pacim_top -o sim
    ./obj_dir/sim

Building the full bank takes a few minutes. The simulation then runs in
seconds. Synthesised coarsely, the bank has about 85 k word-level cells,
9.9 k flip-flops and 67 k memory bits (65 536 of them are the array).
