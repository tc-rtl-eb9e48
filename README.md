# Fast-SSC polar decoder with a rate-independent tree of processing units

Successive-cancellation (SC) decoding of a polar code walks a binary tree
one node at a time, so a frame of N bits costs about N cycles even with
pre-computation. Fast-SSC decoding cuts this. It spots subtrees whose
decisions can be written down directly:

- **N0**: all bits frozen.
- **N1**: no bit frozen.
- **REP**: repetition code, only the last bit is information.
- **SPC**: single parity check code, only the first bit is frozen.

The usual catch is that which subtrees exist depends on the code rate. A
decoder hard-wired for one rate is useless at another.

This design avoids the catch by using one ordinary SC tree of processing
units for everything. The comparators that compute `f` double as a
minimum-search tree for SPC nodes. The adders that compute `g` double as a
summing tree for REP nodes. What changes with the rate is only the schedule,
and the schedule is derived in logic from the frozen-bit mask. At N = 1024,
a frame of the (1024,870) code takes 156 cycles. A rate-1/2 code takes
about 256 cycles. A two-bit pre-computation SC decoder needs 767 cycles.

## Number format

- Channel LLRs are 4-bit two's complement (`QC`).
- Inner LLRs are 5 bits (`Q`), with no fraction bits.
- Sums and differences saturate symmetrically to ±15. Saturation is a
  choice of this RTL; the original scheme gives only the widths.
- Values are stored in two's complement. A processing unit converts to
  sign-magnitude only around its comparator, on the `f` path. This keeps
  the converters off the `g` path, which is the critical path.

## The processing unit (`tc_pu`)

Each unit takes two LLRs, `llr1 = α[i]` and `llr2 = α[i+h]`, and computes
all of the following every cycle:

| path | value | used for |
|---|---|---|
| f / minimum | sign = s1 ⊕ s2, magnitude = min(\|a\|,\|b\|) | left child of a regular node; one step of an SPC minimum search (the sign carries the parity) |
| g (pre-computed) | registered `a+b` and `b−a`, one picked by the partial sum | right child of a regular node |
| accumulation | unregistered `a+b` | one step of a REP sum |

Three mode selects pick the path:

- **ms1**: registered g, or direct sum.
- **ms2**: f/minimum path, or g/accumulation path.
- **ms3**: load the comparator result into the 1-bit select-signal (SS)
  register, or hold it.

The SS register remembers which input was smaller during an SPC search.
The search takes several cycles, so the register must hold until the
parity comes back.

Towards the partial-sum generator (PSG) the unit offers two bits:

- `ps_l = s1 ⊕ s2 ⊕ pcb`
- `ps_r = s2 ⊕ (pcb & ss)`

Here `pcb` is the "parity or 0" bit that reaches the unit. The first bit
follows the original block diagram. The second bit is an addition of this
RTL, needed to hand over both halves of a node's decisions.

Per unit this is 3Q+1 flip-flops: the two pre-computation registers, the
stage register R (kept in the tree) and SS. That matches a register budget
of about (3q+1)·N for the whole decoder.

The stage-0 unit (`tc_pu0`) decides two bits per cycle:

- `u1` is the sign XOR. The `f` result is fed straight into the `g`
  selection, so `u2` is ready in the same cycle.
- Frozen bits are forced to 0.
- The same unit gives the REP decision (the sign of the last sum) and the
  SPC parity bit.
- Its SS register reloads every cycle, because the parity cycle always
  follows immediately.

## The tree (`tc_pu_tree`)

Stage `s` has `2^s` units, N−1 units in all. Each unit of stages 1..n−1
writes a stage register R. All LLR storage is one heap-ordered array:

- `r[2^s + k]` is the register of unit k of stage s.
- `r[N + i]` is channel LLR i.

Unit k of stage s reads `r[2^(s+1)+k]` and `r[2^(s+1)+k+2^s]`, which are
exactly the pairs (i, i+half) of the `f` and `g` equations. Drawings of this
tree usually show the two inputs of a unit side by side. That is the same
tree with the wires in bit-reversed order.

Behind each unit of stages 0..n−2 sits a parity transmit unit (`tc_ptu`),
N/2−1 in all. It computes `O1 = PCB & ~SS` and `O2 = PCB & SS`. When
`pcb_en` is raised, the SPC parity bit leaves the stage-0 unit and runs
back up the tree through the PTUs. At each level, the SS register of the
unit it passes steers it towards the smaller input. In the same cycle, the
units at the top of the SPC node report corrected decisions. Only the unit
whose inputs held the least reliable LLR receives the bit.

All units of a stage share their control lines. Changing the rate therefore
changes only the per-stage control sequence.

## Scheduling (`tc_node_classifier`, `tc_controller`)

The classifier labels each of the N−1 internal nodes from the frozen mask,
one gate per flag and node:

- N0 = N0(l) & N0(r)
- N1 = N1(l) & N1(r)
- REP = N0(l) & REP(r)
- SPC = SPC(l) & N1(r)

Every two-bit node is labelled PAIR and goes to the stage-0 unit.

The controller walks the tree depth first and does one operation per cycle.
Its state is the current level, the index within the level, and a step
count. The node at level m keeps its LLRs in the stage-m registers.

| node | cycles | what happens |
|---|---|---|
| regular | 1 | stage m−1 writes f and captures sum/difference; go to the left child |
| PAIR | 1 | stage-0 unit decides two bits |
| N0 / N1 | 1 | zeros / hard decisions of stage m−1's inputs |
| REP (2^m bits) | m | stages m−1..1 add pairs; stage 0 adds the last pair, its sign is the decision |
| SPC (2^m bits) | m+1 | stages m−1..1 run the minimum search and load SS; stage 0 finishes; in the extra cycle the parity bit is released |

The hardest part to follow is what happens after a node finishes:

1. In the node's last cycle, its decisions go out on the beta port.
2. The controller climbs past every ancestor that this completes, i.e.
   while the finished node is a right child.
3. At the first left child, at level m′, the PSG returns that child's full
   decision vector on `psum` in the same cycle.
4. Stage m′ loads the matching `g` values (sum or difference) into its
   registers at the clock edge.
5. The next cycle starts on the right sibling.

So the `g` step costs nothing. A tree with no fast node takes exactly N−1
cycles. The combinational path from a decision, through the PSG, to the
`g` multiplexer is the price.

Two assertions in the controller check that a `g` load never falls in an
`f` step and that only one stage loads per cycle.

## Partial-sum generator interface

The PSG is not part of this RTL; the decoder is meant to use an existing
design. `tc_decoder` exposes its interface instead.

When `beta_valid` is high, a node of `2^m` bits at (`beta_level`,
`beta_index`) has finished. Its decisions come in split form, for
k < h = 2^(m−1):

- `beta_l[k] = β[k] ⊕ β[k+h]`
- `beta_r[k] = β[k+h]`

For a two-bit node these are u1 and u2.

When `g_valid` is also high, the PSG must return on `psum[k]` the decisions
β[k] of the left node just completed at `g_level`, including the node
finishing now. This return must arrive in the same cycle.

The root's β is the code-word estimate x̂, and u = x̂·G. `tb/tc_psg_model.sv`
is a behavioural model of this contract. It keeps one decision vector per
level and combines β = [β_left ⊕ β_right, β_right] while climbing.

## Frame interface and timing

1. Pulse `start` while idle, with `ch_llr` and `frozen` valid. The LLRs are
   captured at that clock edge.
2. `busy` is then high for exactly the decoding cycles.
3. `done` pulses once after them.

`frozen` must stay stable during a frame. The reset is asynchronous and
active low.

## Files

| file | contents |
|---|---|
| `rtl/tc_pkg.sv` | default sizes (N = 1024, Q = 5, QC = 4) and the node-kind type |
| `rtl/tc_c2s.sv`, `rtl/tc_s2c.sv` | number-format converters |
| `rtl/tc_pu.sv`, `rtl/tc_pu0.sv`, `rtl/tc_ptu.sv` | processing units and parity transmit unit |
| `rtl/tc_pu_tree.sv` | unit tree, stage registers, channel buffer, PTU network |
| `rtl/tc_node_classifier.sv`, `rtl/tc_controller.sv` | schedule |
| `rtl/tc_decoder.sv` | top level |
| `tb/tc_ref_pkg.sv` | bit-accurate recursive software model of the decoder, with its latency |
| `tb/tc_psg_model.sv` | behavioural PSG |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_tc_decoder_full` |

## Verification

Every testbench prints `TB_RESULT checks=N failures=M`:

- The unit testbenches sweep every 5-bit input pair.
- The classifier and controller testbenches compare against independent
  recursive walks of the tree. The controller is checked cycle by cycle.
- `tb_tc_decoder` decodes 60 frames at N = 64 against the software model:
  code word, decoded bits and latency. Its masks include rate 0, rate 1, a
  tree with no fast node (N−1 cycles) and random masks. It counts f steps,
  g loads, every node kind and SPC parity corrections, and fails if any of
  them never occurred.
- `tb_tc_decoder_full` runs the default N = 1024. Frozen sets come from a
  Bhattacharyya construction at 2.5 dB, so they need not match the ones
  the design was originally evaluated with.

| code | latency (cycles) | published latency |
|---|---|---|
| (1024,870) | 156 | 156 |
| (1024,512) | 256 | 266 |
| rates 0.05–0.95 | 79–256, i.e. 66.6 %–89.7 % below 767 | at least 60 % below |

To run one testbench with plain Verilator:

```
verilator --binary --timing --assert --top-module tb_tc_decoder \
  rtl/tc_pkg.sv tb/tc_ref_pkg.sv rtl/*.sv tb/tc_psg_model.sv tb/tb_tc_decoder.sv
./obj_dir/Vtb_tc_decoder
```

The full-size build takes about two minutes; the run takes under a second.

## Departures and limits

- **PSG:** not implemented in RTL (see above).
- **u conversion:** the decoder delivers node decisions β, not û. The
  conversion û = β·G for fast nodes is left to the PSG side.
- **Own choices:** saturation, the comparator tie rule (a tie selects the
  first input), reset behaviour, the start/busy/done handshake, the
  per-stage grouping of control lines and the cycle-level placement of the
  g load are all this RTL's own.
- **Zero-magnitude LLRs:** u1 and the SPC parity use the raw sign XOR, as
  the stage-0 unit is drawn. S2C turns a negative zero into +0. In both
  cases, ties at magnitude 0 can give a decision that differs from exact
  min-sum; the software model copies this behaviour.
- **Parity-table typo:** the PTU truth table as originally printed has an
  SS entry that contradicts its own logic equations; the equations were
  followed.
- **Not covered:** timing closure, area and the 1.04 GHz clock figure;
  nothing here was synthesised to a cell library.
