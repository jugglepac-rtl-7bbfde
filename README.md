# JugglePAC: accumulating back-to-back floating-point datasets with one pipelined adder

Floating-point adders are deeply pipelined: the adder here takes p = 14 cycles to
produce a sum. A plain accumulator feeds each sum back into the adder. With a
deep adder, that forces either a stall per input or p separate partial sums. The
partial sums must then be reduced, and they get mixed up when the next dataset
arrives before the last one is finished.

JugglePAC takes one value per clock, forever. Datasets of any length above a
minimum follow each other with no gap. It produces each dataset's sum once, using
a single adder and no block RAM. It does this by sharing the adder in time:

* In every other cycle (**state 1**), the adder adds two consecutive input values.
  The input stream of N values becomes N/2 subsums.
* In the cycles in between (**state 0**), the adder adds two subsums of the same
  dataset that have already come out of it.

The input needs only half the adder's rate, so the other half is free for
reducing subsums. Every subsum carries a small **label** that names its dataset.
Subsums of up to 2^L datasets can therefore be in flight at once ("juggled")
without being mixed.

This repository holds synthesizable SystemVerilog (IEEE 1800-2017) for the
accumulator, a binary64 pipelined adder to go with it, and self-checking
testbenches.

## Block diagram

```
 in, valid, start
     |        \______________________ ++Label ________________________
     v                                                                 |
 [zero mux: valid ? in : 0] --> [held element] --+                     |
                                                 |  state 1            |
                   pair FIFO (ceil(log2 p) = 4) -+--> [operand and label muxes, st]
                        ^                               |  pipeline register
                        |                               v
                 Pair Identifier          adder (p) | matching shift register (p)
                 (one reg per label)                |              |
                        ^                           v              v
                        +---- not final ---- Output Identifier (counter per label)
                                                    |
                                                 final --> out, out_en, out_label
```

| Block | File | Role |
|---|---|---|
| state machine | `rtl/jp_state_machine.sv` | state 1 = add inputs, state 0 = add a FIFO pair |
| label counter | `rtl/jp_label_counter.sv` | next label (mod 2^L) at each `start` |
| operand multiplexers | `rtl/jp_operand_mux.sv` | zero insertion, input pairing, FIFO pop, pipeline register in front of the adder |
| adder | `rtl/jp_fp_adder.sv` (+ `jp_pkg::fp_add`) | binary64 a+b, latency P |
| matching shift register | `rtl/jp_matching_shift_register.sv` | label and valid bit, P stages, beside the adder |
| output identifier | `rtl/jp_output_identifier.sv` | per-label addition counters; decides final or fed back |
| pair identifier | `rtl/jp_pair_identifier.sv` | one waiting subsum per label; forms pairs |
| pair FIFO | `rtl/jp_pair_fifo.sv` | queue of ready pairs with their labels |
| top | `rtl/jugglepac.sv` | wiring, minimum-length assertion |
| package | `rtl/jp_pkg.sv` | `fp_t`, `fp_add()`, `min_dataset_len()` |

## The schedule

Take a dataset a of 6 values followed at once by dataset b. With an adder that
returns results immediately, the schedule is:

| cycle | input | adder adds | state |
|---|---|---|---|
| 1 | a1 | a0 + a1 | 1 |
| 3 | a3 | a2 + a3 | 1 |
| 5 | a5 | a4 + a5 | 1 |
| 6 | b0 | (a0+a1) + (a2+a3) | 0 |
| 7 | b1 | b0 + b1 | 1 |
| ... | ... | the subsums of a and b, alternating | ... |

Nothing waits for dataset a to finish. Its remaining subsums are reduced in the
state-0 slots while b's inputs use the state-1 slots.

**Odd lengths.** If a dataset has an odd number of elements, its last element has
no partner when the next dataset starts. That shows up as a `start` arriving in
state 1. The lone element is then added to 0 in that cycle, under its own
dataset's label. The machine stays in state 1 for one more cycle, so the new
dataset's first two elements are paired as usual. That cycle's state-0 slot is
lost, and the pair FIFO absorbs the backlog.

**Gaps.** A cycle with `valid = 0` feeds a 0 into the current dataset. The sum
does not change, and the dataset stays open.

## Labels and the life of a subsum

1. An addition leaves the operand multiplexers through a register, together with
   its label, a valid bit, the state it was issued in, and a marker for "first
   state-1 addition of its dataset".
2. The adder and the matching shift register have the same length. The label
   therefore comes out in the same cycle as the sum.
3. The output identifier decides whether the sum is final (see below). If it is
   not, the sum goes to the pair identifier.
4. The pair identifier has one register per label. If the register for this label
   is empty, the subsum waits there. If it already holds a subsum, the two form a
   pair and go to the FIFO with their label.
5. In the next state-0 slot, the oldest pair leaves the FIFO for the adder.

A round trip through the loop takes P + 2 cycles: the adder, the cycle into the
FIFO, and the register in front of the adder. Once its last input has arrived, a
dataset has at most about P subsums left. Reducing them takes ceil(log2 P) rounds.

## Knowing when a dataset is done

This is the subtle part. Nobody tells the accumulator how long a dataset is. Each
label has a small up/down counter, updated when an addition **enters** the adder:

* a state-1 addition counts up (two inputs make one new subsum), except the
  dataset's first one;
* a state-0 addition counts down (two subsums make one).

The counter therefore always equals "subsums of this dataset that exist, minus
one". This includes subsums still inside the adder, waiting in the pair
identifier, or queued in the FIFO. A sum is final when its label's counter is 0
as it **leaves** the adder. That includes any update in the same cycle. The
count is then zero because this sum is the only subsum its dataset has left.

Inputs keep arriving while a dataset is open, zeros included, so state-1
additions keep the count above zero until the next `start`. That is why a
dataset ends only when the next one starts. It is also why a gap adds zeros
instead of pausing: a pause could let the count reach zero early.

The count is updated at the adder input, not the output. A count kept at the
output could not tell a dataset's first subsum from its final sum.

## Minimum dataset length, latency, order

A label may be reused only after the previous dataset with that label has
produced its sum. With 2^L labels, 2^L − 1 other datasets lie between two uses of
the same label. Each dataset must therefore be long enough that 2^L − 1 of them
cover the drain time of one.

The published rule is Eq. (1):

    MIN_LEN = max( ceil( ((1 + ceil(log2 p)) * p + 4) / (2^L - 1) ), 4 )

With p = 14 it gives 74, 25, 11 and 5 for L = 1, 2, 3, 4. That is how p = 14 was
inferred: no other p reproduces those four values.

**Departure.** In this RTL each reduction round costs p + 2 cycles, not p. The
measured drain time is 80–87 cycles from a dataset's last element to its sum,
against the rule's 74. With datasets of 25 at L = 2, a label comes back while its
previous dataset is still being reduced, and the two sums mix (seen in
simulation). The RTL therefore applies Eq. (1) with p + 2 in place of p, which
gives `MIN_LEN` = 28 for P = 14, L = 2. An assertion in `jugglepac` flags shorter
datasets.

Measured at P = 14, L = 2, over random streams of 28–88-element datasets:

* Latency from a dataset's last element to its sum: 77–87 cycles. It varies with
  the current and previous dataset lengths.
* First state-0 addition: 20 cycles after the very first input. The published
  count is p + 3 + (1 − p mod 2) = 18; the 2 extra cycles are the two loop
  registers above.
* Pair FIFO occupancy: at most 3 of its 4 slots. No overflow was seen.
* Sums came out in dataset order in every run at L = 2. At L = 3 they also stayed
  in order at 12–18-element datasets. At L = 4 with 6–9-element datasets, about
  one sum in five overtakes an older one. `out_label` is provided so that a
  consumer can put them back in order.

Minimum lengths for the other label widths (P = 14):

| L | published (Eq. (1), p) | this RTL (Eq. (1), p + 2) |
|---|---|---|
| 1 | 74 | 84 |
| 2 | 25 | 28 |
| 3 | 11 | 12 |
| 4 | 5 | 6 |

## Interface (`jugglepac`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock; synchronous active-high reset |
| `in` | in | 64 | input value, IEEE-754 binary64 |
| `valid` | in | 1 | 0 inserts a 0 into the current dataset |
| `start` | in | 1 | first element of a dataset (requires `valid = 1`) |
| `out` | out | 64 | a dataset's sum |
| `out_en` | out | 1 | `out` valid, one cycle per dataset |
| `out_label` | out | L | label of that dataset: 0, 1, 2, ... mod 2^L from reset |
| `fifo_overflow` | out | 1 | diagnostic; never set for legal input |

Protocol:

* Raise `start` with the first element of every dataset. Then present one element
  per cycle until the next `start`.
* The last dataset of a stream is closed by one more `start`. A dummy dataset is
  fine, and its own sum never appears.
* Nothing is accumulated before the first `start` after reset.

Parameters:

| parameter | default | meaning |
|---|---|---|
| `P` | 14 | adder latency |
| `L` | 2 | label width; L = 2 is the width the published design builds on both FPGAs |
| `FIFO_DEPTH` | ceil(log2 P) = 4 | pair FIFO depth |

## The adder

`jp_fp_adder` computes a binary64 sum with `jp_pkg::fp_add` in its first stage,
then passes it through P − 1 plain registers. A synthesis tool with register
retiming can spread those registers through the logic. On an FPGA you would
normally put the vendor's floating-point adder core here with the same latency.
The accumulator does not depend on what is inside the adder.

`fp_add` behaves like this:

* rounds to nearest, ties to even;
* keeps subnormals;
* returns +0 on exact cancellation and −0 only for (−0) + (−0);
* returns infinity on overflow;
* returns the quiet NaN `7FF8_0000_0000_0000` for NaN operands or ∞ − ∞.

Its testbench compares it bit for bit with the simulator's `real` addition.

## What follows the published design, and what does not

Taken from the published design:

* the two-state schedule and the odd-length rule;
* incrementing dataset labels;
* the label shift register beside the adder;
* pairing with one register per label;
* a register FIFO of ceil(log p) slots;
* the zero multiplexer for invalid cycles;
* the pipeline registers in front of the adder;
* the per-label up/down counter that skips each dataset's first state-1
  addition and sends a result out when its counter is 0.

Choices made in this RTL:

* binary64 precision and the adder's internals;
* P = 14, which is inferred rather than stated;
* updating the counters at the adder input and testing them at the output;
* carrying the valid bit in the matching shift register (the published diagram
  draws a separate pipeline inside the output identifier);
* adding the lone element of an odd dataset to 0;
* idling until the first `start`;
* the `out_label` output;
* the minimum length of 28 instead of 25 (see above).

Not covered: FPGA area and clock-rate figures. The published results (208 MHz on
Virtex-II Pro, 334 MHz on Virtex-5, 625–3339 slices) cannot be checked from RTL
simulation.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_jugglepac` | The whole accumulator at its defaults: 124 back-to-back datasets. Exact-sum data is checked bit for bit; general binary64 data is checked to 1e-12 of the sum of magnitudes. Also checks labels and output order, and the cycle of the first state-0 addition. Counts odd hand-overs, zero inputs, label wrap-arounds, FIFO depth ≥ 2 and pairings, and fails if any never happened. Reports the largest per-label addition count (16 = p + 2 in the reference run) and checks it stays within the counter width. |
| `tb_jugglepac_label_widths` | The other evaluated label widths, L = 1, 3, 4 (P = 14), at each width's minimum length (84, 12, 6), with exact sums matched per label. At L = 4, sums overtake each other (about 25 times in 120 datasets). A fourth instance runs L = 4 with datasets of 19 or more elements and requires every sum to come out in input order, which holds. |
| `tb_jp_fp_adder` | 20,000 additions including subnormals, cancellation, overflow, ±0, ∞ and NaN, against `real` addition; checks the latency. |
| `tb_jp_state_machine` | alternation and the odd-length extra state-1 cycle |
| `tb_jp_label_counter` | label sequence and wrap-around |
| `tb_jp_operand_mux` | every issued addition against a model: pairing, zero padding, first marker, FIFO pops |
| `tb_jp_matching_shift_register` | exact delay and reset contents |
| `tb_jp_pair_identifier` | pairing per label against a model |
| `tb_jp_pair_fifo` | order, flags and occupancy against a queue |
| `tb_jp_output_identifier` | final/feedback decision against a counter model, including same-cycle updates |

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl rtl/jp_pkg.sv rtl/*.sv tb/tb_jugglepac.sv \
          --top-module tb_jugglepac -o sim
./obj_dir/sim +verilator+rand+reset+2
```

For a unit testbench, swap in its file and top-module name. Each testbench runs
in well under a second.
