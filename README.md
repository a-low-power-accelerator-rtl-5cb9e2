# Near-zero skipping matrix-vector accelerator

Most of the work in a fully-connected neural-network layer is the
matrix-vector product `y[i] = ReLU(sum_j W[i][j] * x[j])`. Many of its
products are zero because a weight was pruned or an input was clipped by the
ReLU of the previous layer. Many more are not zero but are too small to
change the result. This accelerator skips both kinds. It does not compute
a product to find out that it is small. It predicts the product's size from
where the two operands' leading ones sit. Only the products that may matter
reach the multipliers, and the multipliers are idle for the rest.

The RTL in `rtl/` is synthesizable SystemVerilog (IEEE 1800-2017). It
implements the architecture published in "A Low-Power Accelerator for Deep
Neural Networks with Enlarged Near-Zero Sparsity" (Huan, Qin, You, Zheng, Zou).
The section *Departures and open points* lists what follows that description
and what had to be chosen here.

## The near-zero test

Take two 16-bit operands `A` and `B`, with `lA` and `lB` leading zeros in
their magnitudes. Then `2^(15-lA) <= |A| < 2^(16-lA)`, and the same holds for
`B`. So the 32-bit product `|A*B|` has either `lA+lB` or `lA+lB+1` leading
zeros. The sum `l_total = lA + lB` therefore sets the product's magnitude to
within a factor of four. A large `l_total` means a small product.

The accelerator compares `l_total` with a 5-bit run-time threshold `th`:

* `l_total > th`: the product is taken as 0 and the pair is discarded.
* `l_total <= th`: the pair is kept and multiplied exactly.

A zero operand counts 16 leading zeros, so for any `th` below 16 every zero
product is discarded too. `th = 31` discards only `0 x 0` and gives exact results.
Lower thresholds skip more products and accept a larger error.

Where `th` goes in the value domain depends on the fixed-point format. Say the
two operands have `fa` and `fb` fractional bits. Then a discarded product is
below `2^(31 - th - (fa + fb))` in real units (`|A*B| < 2^(32 - l_total)` and
`l_total >= th + 1`). Nothing in the hardware depends
on the format.

## Dataflow

```
 host writes ──► neuron input mem ─┐
                                   ├─ mux ─► x[j] ──┐
            ┌─► neuron output mem ─┘                ▼
            │                           ┌──────────────────────┐
 host ─► weight mem ─► column W[*][j] ─►│ NZAU: 17 ABS + LZC,   │─ data_ld[0..15]
            │          (16 x 16 bit)    │ 16 adders, 16 compare │
            │                           └──────────────────────┘
            │          x[j], W[i][j], data_ld[i]  ──►  Processing Lane i (x16)
            │                                         buffer ─► 16 mult + tree ─► ACC
            │                                                                   │
            └── neuron output mem ◄── ReLU / scale / saturate ◄── output mux ◄──┘
                      │
                      └──► read port to off-chip memory
```

The controller (`nz_ctrl`) reads one column per cycle: one neuron input
`x[j]`, shared by all lanes, and the sixteen weights `W[i][j]` of the current
16-neuron tile. The NZAU (`nzau`) works out `l_total` for all sixteen pairs
in the same cycle and raises `data_ld[i]` for the pairs worth keeping. Lane
`i` (`processing_lane`) computes output neuron `i` of the tile. A layer with
more than 16 outputs runs as several passes, one per tile. The weight tiles
are stored back to back: the weight of pass `p`, column `c` is at address
`p * n_cols + c`.

The input mux (`ni_src_mux`) feeds the NZAU from the neuron input memory
(`src_sel = 0`) or from the neuron output memory (`src_sel = 1`). With
`src_sel = 1`, a layer reads the previous layer's results without leaving the
chip.

## Inside a Processing Lane

This part is what makes the skipping save power. A lane does not multiply
each pair as it arrives. Instead, `pl_buffer` collects the kept pairs:

* A 4-bit counter points at the next free slot. It advances only on
  `data_ld`.
* A 4-to-16 decoder writes the pair into one of sixteen 16-bit registers.
  The inputs and the weights each have their own set of registers, which
  form the NI and WT buffers.
* When the counter wraps after the sixteenth pair, an overflow flag is
  registered.
* On the next edge, the two sets of sixteen registers are copied as 256-bit
  words into the operand registers (OP_reg).

`pl_mac` holds sixteen signed 16x16 multipliers and a four-level adder tree.
It reduces OP_reg to one sum and adds that sum to the 48-bit accumulator
(ACC_reg).

The multipliers therefore see a new word only once per sixteen kept pairs.
The buffers change state only on kept pairs. The OP_reg register separates the
two: slot 0 of the buffer can be refilled on the same edge that OP_reg is
loaded, so the lane accepts one pair in every cycle and never stalls.

Each lane has three clock gates (`nz_icg`, a latch plus an AND gate):

* The counter and the data registers get a clock only in cycles with a kept
  pair or a flush.
* OP_reg gets a clock only in the cycle after an overflow or a flush.
* The accumulator and the result register get a clock only when OP_reg
  holds a new word.

The multipliers and the adder tree have no clock of their own. Their inputs
change only when OP_reg is clocked, so they do not switch in the cycles in
between. Only the few single-bit flags that decide the gating run on the free
clock. The gates are held open while reset is asserted, so the gated
registers are reset even when the reset input has no falling edge. The
`mac_active` output of the top shows, lane by lane, the cycles in which the
multipliers work. The three latches of each lane (48 in all) are these clock
gates and are intended.

A neuron's last column carries a flush. The buffer then sends whatever it
holds: the slots not yet filled in this word are cleared to zero, the counter
restarts, and the word is marked as last. If nothing is pending, a word of
zeros is sent. When `pl_mac` gets the last word, it puts the finished sum on
`result` for one cycle and clears the accumulator.

Lane timing, in clock edges after the edge that takes the flush column:

| edge | event |
|------|-------|
| 0 | last pair written into the buffer; flush flag registered |
| 1 | OP_reg loaded (`op_valid`, `op_last`) |
| 2 | ACC_reg + adder tree -> `result`, `res_valid` for one cycle |

## Results and write-back

All lanes see the flush in the same cycle, so their results arrive together.
`out_mux` captures the sixteen results and then writes them one per cycle,
lane 0 first, into the neuron output memory. The addresses start at
`out_base` and continue from pass to pass. On the way, each result goes
through three steps:

1. ReLU: negative results become 0.
2. An arithmetic right shift by `out_shift`.
3. Saturation to `0..32767`.

Each output is then a 16-bit word and can serve as the next layer's input.

The write-back takes 16 cycles and overlaps with the next pass. The
controller issues a pass's last column only when the previous pass's results
are no longer in flight or being written. That condition holds on its own
whenever `n_cols >= 21`. Shorter vectors make the controller hold the last
column back for a few cycles, and the `stall` output marks those cycles.

## Timing of a layer

* A column read in cycle `t` reaches the NZAU and the buffers in cycle
  `t+1`.
* A pass's results are written in cycles `t+5 .. t+20` after its last
  column.
* `done` pulses in cycle `t+20` of the final pass.

From the cycle after `start` to `done`, a layer therefore takes
`n_pass * n_cols + holds + 20` cycles. The testbenches check this count
exactly.

As an example, take AlexNet's last layer: 4096 inputs and 1000 outputs, which
is 63 passes. It needs `63 * 4096 = 258,048` column cycles. At 500 MHz that
is 516 us. The weight memory holds two passes, so the layer runs as 32 runs
of at most two passes each. The 20-cycle tail of each run brings the total
to 258,688 cycles, or 517.4 us. The time to reload weights between runs is
not included: it depends on the off-chip memory.

The multipliers' duty cycle depends only on the data and the threshold. In
the FC8-shaped test with synthetic data, at `th = 18`, about 5% of the
products are kept. The multipliers then work in fewer than 0.4% of the
lane-cycles, because sixteen kept products make one multiplier cycle.

## Top-level interface (`nz_accel`)

| port | width | use |
|------|-------|-----|
| `ni_we, ni_waddr, ni_wdata` | 1, 14, 16 | load the neuron input memory |
| `wt_we, wt_waddr, wt_wdata` | 1, 14, 16x16 | load one weight column (lane `i` in `wt_wdata[i]`) |
| `no_re, no_raddr, no_rdata` | 1, 12, 16 | read outputs; data one cycle after `no_re` |
| `start` | 1 | run a layer; configuration must stay stable while `busy` |
| `n_cols` | 14 | input vector length (>= 1) |
| `n_pass` | 12 | number of 16-neuron passes (>= 1) |
| `in_base` / `out_base` | 14 / 12 | first input / output address |
| `src_sel` | 1 | 1: take the input vector from the output memory |
| `th` | 5 | near-zero threshold on `l_total` |
| `out_shift` | 6 | right shift applied before saturation |
| `busy`, `done`, `stall` | 1 | status; `done` pulses once per layer |
| `mac_active` | 16 | lanes whose multipliers work this cycle |

Numbers are 16-bit two's complement. The memory depths are parameters:
`NI_DEPTH = 9216`, `WT_DEPTH = 9216` (256-bit words) and `NO_DEPTH = 4096`.
These sizes hold one pass of AlexNet's largest fully-connected layer (9216
inputs) and its largest output vector (4096). Two passes of the 4096-input
layers fit at once. The memories are written as arrays, which an SRAM
compiler would replace by macros.

## Files

| file | block |
|------|-------|
| `rtl/nz_pkg.sv` | shared widths and types |
| `rtl/nz_abs.sv`, `rtl/nz_lzc.sv` | magnitude and 16-bit leading-zero counter |
| `rtl/nzau.sv` | Near-Zero Approximation Unit |
| `rtl/pl_buffer.sv`, `rtl/pl_mac.sv`, `rtl/processing_lane.sv` | Processing Lane |
| `rtl/nz_icg.sv` | clock-gating cell |
| `rtl/ni_mem.sv`, `rtl/wt_mem.sv`, `rtl/no_mem.sv` | neuron input, weight and neuron output memories |
| `rtl/ni_src_mux.sv`, `rtl/out_mux.sv` | input mux; output mux with ReLU and write-back |
| `rtl/nz_ctrl.sv` | layer sequencer |
| `rtl/nz_accel.sv` | top level |

Every module has a testbench `tb/tb_<module>.sv` that checks the module on
its own. Each testbench compares against values it computes itself and
prints `TB_RESULT checks=N failures=M`.

* `tb_nz_abs` and `tb_nz_lzc` are exhaustive over all 16-bit inputs.
* `tb_nzau` also checks the bound above: the product's leading-zero count is
  `l_total` or `l_total + 1`.
* `tb_nz_accel` runs the whole design at its default sizes. It covers:
  * a three-pass layer
  * a layer fed back from the output memory
  * a short-vector layer that exercises the write-back hold
  * a 4096-input layer of two tiles

  It checks every output, the cycle count of each layer and the number of
  multiplier cycles. It also counts kept pairs, near-zero skips, zero skips,
  full and partial operand words, ReLU clamps and saturations.
* `tb_alexnet_fc` runs AlexNet's three fully-connected layers in a chain:
  FC6 (9216 -> 4096), FC7 (4096 -> 4096) and FC8 (4096 -> 1000). The
  weights are synthetic and the input is random. FC6 fills the input,
  weight and output memories to their full depth. Each layer's outputs are
  read out through the host port and written back as the next layer's
  input. The weights are reloaded through the host port as many passes at
  a time as fit. The testbench checks every output and every run's cycle
  count. It reports the compute time at 500 MHz (FC8: 258,688 cycles,
  517.4 us) and the multiplier duty cycle. A threshold sweep on FC8 shows
  that the kept products and busy multipliers fall as th falls.

To simulate with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -y rtl +libext+.sv -Irtl \
    rtl/nz_pkg.sv tb/tb_nz_accel.sv --top-module tb_nz_accel
./obj_dir/Vtb_nz_accel
```

Replace `tb_nz_accel` with any other testbench name. The simulator must be
two-state safe: every register that is read is reset.

## Departures and open points

Followed from the published description:

* The leading-zero prediction and its bound.
* The NZAU: 17 magnitude and LZC units (one shared by the neuron input), 16
  adders, and 16 comparators against a 5-bit threshold.
* Sixteen lanes of sixteen multipliers, 256 in all.
* The per-lane 4-bit counter, 4-to-16 decoder and sixteen 16-bit slots per
  operand.
* The counter-overflow transfer into 256-bit operand registers.
* The adder tree and accumulator.
* The block diagram: input and output memories, the mux that feeds outputs
  back as inputs, the output mux, and the read-out path to off-chip memory.
* The one-column-per-cycle schedule.

Chosen here, because the description does not cover it:

* **Compare rule.** The text says pairs whose total *exceeds* the threshold
  are discarded. Its block diagram draws the comparator as "<" without saying
  which side is which. The RTL keeps a pair when `l_total <= th`.
* **Leading-zero counter.** The original uses a shared-carry-propagate
  counter from the literature. Here it is a plain mux tree of the same
  function.
* **Neuron ends.** The flush of a partial word at the end of a neuron, and
  the clearing of the accumulator, are not described.
* **Operand-register timing.** The operand registers load one cycle after
  the sixteenth pair.
* **Clock gates.** The published diagram draws each gate as a plain AND of
  the clock and the enable. Here each one is a latch-and-AND cell, held open
  during reset. A flow would map it onto its library's gating cell.
* **Formats and widths.** The accumulator width (48 bits), full-precision
  arithmetic, the output shift and saturation, and the place of the ReLU
  (applied at write-back) are choices made here.
* **Control and interfaces.** The controller, the weight layout in memory,
  the host load and read-out ports, and all memory depths are choices made
  here.
* **Zero skipping.** The published evaluation compares three settings: no
  skipping, zero skipping only, and near-zero skipping. The threshold alone
  can give the first and the third, but not the second. A zero operand's
  pairs have `l_total` between 16 and 32, and non-zero pairs between 0 and
  30, so no threshold separates exactly the zero pairs. The description
  names no separate zero detector, and none was added.
* **Convolutions.** They must be unrolled into matrix-vector products before
  they reach the accelerator. No mapping is described, and none is built.
* **Timing.** The RTL has not been taken through timing at 500 MHz. The NZAU
  and the buffer write share one cycle, as do the adder tree and the
  accumulator. Each of these paths could need a pipeline register.
