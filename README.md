# Texpand: a trellis-expansion instruction for Viterbi decoding

A Viterbi decoder spends nearly all its time on one step: expanding the
trellis. For every state reached so far, it adds the cost of each outgoing
branch, compares that total with what the destination state already holds,
and keeps the cheaper path. On a plain processor this add-compare-select
(ACS) step takes several dozen instructions per trellis node. The idea of
the design described here is to leave the decoding loop in software and give
the processor a single custom instruction, **Texpand**, which expands one
trellis node per call. The instruction also keeps the record of surviving
paths, so the program only has to issue Texpand for every reachable node and
then ask for the decoded bits.

This RTL implements that instruction as logic behind the custom-instruction
port of a soft processor. It follows the design published by W. Ahmad,
I. H. Abbassi, U. Sanwal and H. Mahmood ("Accelerating Viterbi Algorithm
using Custom Instruction Approach"), where the instruction was added to a
NIOS II soft core on a Cyclone II FPGA. It also includes the rate-1/2
convolutional encoder whose code the instruction decodes. That publication
gives the code, the decoding rules and the way the instruction is used. It
does not give the instruction's port layout, operand format or internal
structure. Those are this implementation's own, and each is marked as such
below and in the source headers.

## The code

The default code is a rate-1/2 convolutional code with two memory elements
and therefore four states. The state is written `m1 m2`, where `m1` holds
the newest information bit. Each information bit `u` produces a pair
`V1 V2` and moves the encoder to `{u, m1}`:

| state | u=0: pair → next | u=1: pair → next |
|-------|------------------|------------------|
| 00    | 00 → 00          | 10 → 10          |
| 01    | 00 → 00          | 10 → 10          |
| 10    | 11 → 01          | 01 → 11          |
| 11    | 11 → 01          | 01 → 11          |

The table is the published state diagram, copied edge by edge. In generator
form it is `V1 = u ⊕ m1`, `V2 = m1`: generator masks `G1 = 110` and
`G2 = 010` over the shift register `{u, m1, m2}`. The generator form is this
implementation's notation. It is derived from the table, not from a
schematic. Example: the information bits `1 1 0 1` followed by two zero
flush bits encode to `10 01 11 10 11 00`.

The code is a parameter (`K`, `G1`, `G2` in `viterbi_pkg`), because the
instruction is meant to work for any rate-1/2 code. Setting `K = 5`,
`G1 = 10011`, `G2 = 11011` gives the 16-state GSM full-rate channel code.

## Decoding rules

* **Branch weight.** The weight of a branch is the number of received bits
  that differ from the pair the branch would have sent (hard decision: 0, 1
  or 2).
* **Path weight.** This is the sum of the branch weights along the path.
  The trellis starts in state 0 with weight 0; no other state is reachable
  at first.
* **Select.** When several paths reach the same state, the lightest
  survives. **On equal weights, the path coming from the lower-numbered
  state survives.** For example, if paths from 00 and 01 reach 00 with the
  same weight, the one from 00 is kept. The hardware compares the
  predecessor states themselves, so the outcome does not depend on the
  order in which the program expands the nodes.
* **Trace-back.** Every block ends with K−1 zero flush bits, so the
  transmitted path ends in state 0. The decoded bits are read by following
  the survivors backwards from state 0 at the last stage.

Worked example: the block above, received with its 3rd and 7th bits
flipped, is `10 11 11 00 11 00`. It decodes back to `110100`, with final
weight 2 at state 00. After the first pair, the weights are 00:1 and 10:0.
After the second pair, they are 00:3, 01:0, 10:2 and 11:1.

## The Texpand instruction

### Programming model

The unit sits on a multi-cycle custom-instruction port:
`clk, reset, clk_en, start, n[7:0], dataa[31:0] → result[31:0], done`.
`n` selects the operation; an 8-bit `n` allows the 256 custom instructions a
NIOS II core can hold. There is no second operand.

| n | operation | dataa | result |
|---|-----------|-------|--------|
| 0 | `TEXPAND` | `[1:0]` received pair (bit 1 = first bit); `[2]` start a new trellis first; `[15:8]` source state | `[7:0]` weight now held by the u=0 destination; `[15:8]` same for u=1; `[16]`/`[17]` this source won the u=0/u=1 destination; `[18]` the call completed a stage; `[19]` call refused, trellis already `STAGES` deep; `[20]`/`[21]` weights were tied at the u=0/u=1 destination; `[31:24]` number of completed stages |
| 1 | `TRACEBACK` | — | decoded bits; bit t = information bit of stage t |
| 2 | `READ` | `[15:8]` state | `[7:0]` its path weight in the current stage; `[31]` state reachable |

Any other `n` completes at once with result 0.

A program decodes a block of S received pairs like this:

```
first = 1
for t in 0 .. S-1:
    for s in reachable states of stage t, any order:
        TEXPAND  dataa = rx[t] | first<<2 | s<<8
        first = 0
TRACEBACK          -> decoded bits
READ  state 0      -> weight of the decoded path (number of corrected errors)
```

The reachable states of stage t are 1, 2, 4, … up to 2^(K−1). With the
four-state code, a block of 12 received bits therefore needs 1+2+4+4+4+4 =
19 Texpand calls. For S ≥ 2 stages of the four-state code, the count is 3 + 4·(S−2). Each
result also reports the weights and wins, so a program that keeps its own
path record can use them.

### How a call works inside

The unit holds three things:

* the path weights of the **current stage** (`cur_w`, `cur_v`: weight and
  reachable flag per state);
* the **stage being built** (`nxt`: weight, reachable flag and predecessor
  per state), plus a mask of the current-stage states already expanded;
* the **survivor memory**, one row per completed stage.

A `TEXPAND` call for source `s` feeds the two branches leaving `s`
(u = 0 and u = 1) to two `acs_unit` instances. Each one adds the branch
weight to `cur_w[s]`. It compares the sum with the destination's entry in
`nxt`, applies the select rule, and writes the winner back.

The stage moves on by itself. The call that expands the last reachable
state of the current stage also commits the stage, in the same clock edge.
The new `nxt` becomes `cur`, `nxt` is cleared, and the stage counter
advances. A survivor row is written to the memory: for each state, the
oldest bit of its surviving predecessor. (The rest of the predecessor is the
state itself shifted by one place.) No separate "next stage" instruction is
needed, so a block costs exactly one instruction per node. Setting
`dataa[2]` on a call resets the weights to "only state 0, weight 0" before
that call is executed, which starts a new block. Stage 0 has one reachable
state, so the first call commits stage 0 at once.

`TRACEBACK` starts the `traceback_unit`. From state 0 at the last committed
stage, it goes back one stage per clock. At each stage it emits the newest
bit of the current state, reads that state's survivor bit, and moves to the
predecessor.

### Timing

| operation | `done` after `start` |
|-----------|----------------------|
| `TEXPAND`, `READ`, unknown | 1 cycle |
| `TRACEBACK` of S stages | S+1 cycles (1 if no stage) |

`start` is taken only while `clk_en` is high. No instruction may be issued
while a trace-back is running; an assertion checks this, and another checks
that `done` is a single-cycle pulse. A trace-back, once started, runs to the
end even if `clk_en` falls. All registers reset synchronously on `reset`
(active high).

### Limits

`STAGES` (default 30, i.e. 60 received bits, the largest block the
published design was evaluated on) sets the survivor memory depth. Calls
beyond it are refused and flagged. `STAGES` may be at most 32, because the
decoded bits come back in one 32-bit word. Path weights are 8 bits wide; a
30-stage block can reach at most 60, so there is no saturation logic. `K`
may be 3 to 9 (the source state field is 8 bits).

## Block structure

```
viterbi_texpand_top
├── conv_encoder        transmit end: the code above, registered output
└── texpand_ci          receive end: the custom instruction
    ├── acs_unit  ×2    add-compare-select, one per outgoing branch
    ├── survivor_mem    STAGES × 2^(K-1) bits, sync write, async read
    └── traceback_unit  backward walk, one stage per clock
viterbi_pkg             code helpers, weight type, opcodes, field positions
```

The top carries both ends of the link; they share only clock and reset.
The channel between them, and the processor that drives the
custom-instruction port, lie outside the RTL. The encoder state is brought
out for observation. At the default size the decoder comes to about 200
word-level cells and under 300 bits of storage, 120 of them survivor memory.

## What follows the publication and what does not

Taken from the publication:
* the four-state code (its state diagram and encoding example);
* the branch-weight rule and the lowest-state tie rule;
* trace-back from state 00;
* one trellis node per instruction call; the 19 calls it quotes for 12 bits
  fix this;
* the split into ACS and path-tracking tasks;
* block sizes of 12 to 60 received bits;
* the claim that the instruction serves any rate-1/2 code.

Chosen here, because the publication does not specify them:
* the port signal set and the operand and result layout;
* the `TRACEBACK` and `READ` operations (only Texpand is named);
* automatic stage commit and the in-unit survivor memory;
* the latencies;
* the 8-bit weights;
* the generator-mask parameters;
* synchronous reset.

The published work does not say whether its trace-back ran in software or
in the custom logic. Here it is in the logic.

Not included: the processors. The NIOS II core, its Avalon interconnect and
board peripherals are vendor parts. The same instruction was also written
as microcode for DLX and PicoJava II processors in instruction-set
simulators, and that microcode was published only as instruction counts.
The published cycle counts (for example 28 cycles per Texpand call,
including operand packing, on NIOS II/f) describe the processor plus
software, and this RTL cannot reproduce them. It does reproduce the call
counts behind them: 19 calls for 12 bits and 115 for 60 bits.
115 × 28 = 3220 cycles, which matches the roughly 3200 cycles published for
NIOS II/f at 60 bits.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/viterbi_pkg.sv \
          tb/tb_texpand_ci.sv --top-module tb_texpand_ci -o sim
./obj_dir/sim
```

| testbench | what it shows |
|-----------|---------------|
| `tb_conv_encoder` | encoding example, every edge of the state table, random streams, one-cycle latency |
| `tb_acs_unit` | exhaustive sweep of received pair, states, validity and weights against the select rule, ties included |
| `tb_survivor_mem` | row write/read, write enable |
| `tb_traceback_unit` | recovery of random flushed paths, latency S+1 |
| `tb_texpand_ci` | the worked example (19 calls, the weights above, final weight 2, bits 110100); 40 random blocks of 2–30 stages, expanded in ascending and descending node order, checked against a reference decoder after every stage; refusal past 30 stages; `clk_en` |
| `tb_viterbi_texpand_top` | end to end at default parameters: 12, 18, 30, 40 and 60 received bits, encoder → 0–3 flipped bits → decoder; checks decoded bits and weight against a reference, error-free recovery of single errors, and 19/31/55/75/115 calls. It counts path deletions, ties, stage commits, trace-backs, restarts, refusals and `clk_en` holds, and fails if any never happened |
| `tb_gsm_workload` | the same with the 16-state GSM code (K=5): 47 to 431 calls per block, recovery of up to three flipped bits |

The testbenches' reference decoders are written independently of the RTL.
They use plain integer arrays and the state table or tap lists, not the
package helpers. Every testbench finishes in well under a second.

## Changing the design

* **Another rate-1/2 code:** set `K`, `G1`, `G2` on `viterbi_texpand_top`.
  Mask bit K−1 taps the incoming bit; bit K−1−i taps the bit delayed by i.
  Blocks must end with K−1 zero bits for the trace-back from state 0 to be
  right.
* **Longer blocks:** raise `STAGES` up to 32. Beyond that, the trace-back
  result would have to be returned in several words.
* **Wider weights:** change `WEIGHT_W` in `viterbi_pkg` if blocks can reach
  255 errors. The result layout packs two 8-bit weights, so it would change
  too.
