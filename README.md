# A threshold-gate contingency-table engine for exhaustive epistasis detection

Exhaustive epistasis detection looks for pairs (or larger sets) of SNPs whose
joint genotypes are linked to a trait. The expensive step is the contingency
table: for every pair of SNPs X and Y, and for each of the 3 x 3 genotype
combinations (gx, gy), count the samples that have genotype gx at X and gy at
Y. Cases and controls are counted separately. With each genotype written as a
3-bit one-hot string (0 -> 100, 1 -> 010, 2 -> 001), one table entry is an AND
of two sample masks followed by a population count.

This RTL builds that computation as a network of discrete-time spiking
neurons, in the way a neuromorphic processor would run it:

* the dataset lives in synaptic weights (one *pattern memory* per SNP and
  sample) and is replayed by spikes, not read from a memory bus;
* a *repeater* and an array of *AND neurons* turn one replay of X and three
  replays of Y into the 9 sample masks of the pair, one per timestep;
* a fan-in-limited *population count* built from constant-depth threshold
  circuits (thermometer/one-hot/binary counters and a parity-based binary
  adder tree) counts each mask.

The whole engine is pipelined: after a fixed latency it delivers one table
entry per clock cycle, with no gap between pairs, so a run over N SNPs takes
9 * N(N-1)/2 cycles plus the latency.

One clock cycle is one timestep of the network. A one-bit signal that is high
in a cycle is a spike in that timestep. Every neuron is an instance of
`lif_neuron`, which implements u(t+1) = m*u(t) + b + I(t), spike when
u(t+1) > T (strictly), then reset to 0. A synapse with delay d is d registers
in front of the neuron's input sum, so a spike sent in cycle t through a
delay-d synapse acts on the target's current in cycle t+1+d.

## Sizes

| parameter | default | meaning |
|---|---|---|
| `N_SNP` | 16 | SNPs in the dataset |
| `M` | 64 | samples of one class (cases or controls) |
| `S_PR` | 8 | synaptic weight precision, signed bits |
| `N_PR` | 24 | neuron current precision, signed bits |
| `POPC_L` | 8 | inputs per constant-depth counter (bounded by the neurons' fan-in) |
| `SUM_N` | 2 | operands per binary-sum circuit |

None of these numbers is fixed by the underlying method, which is stated for
any size. The defaults are chosen here: 8-bit weights and 24-bit currents as
on current neuromorphic chips, and M = 64 because fractional synaptic weights
limit the sample count to m <= 2^(S_PR-2). Larger M needs a larger `S_PR`.
`M` must equal `POPC_L * SUM_N^D` for a whole number D of sum levels.

## Data path

```
            load port (genotype -> one-hot weight)
                        |
pair_controller --trig_x--> snp_memory (X role) --x_out[M]--> repeater x M --\
       |        --trig_y--> snp_memory (Y role) --y_out[M]------------------- and_layer --> popc_tree --> entry_count
       +--rep_sync-----------------------------------------> (repeaters)       (Y delayed 3)
       +--tag (x, y, gx, gy) --- delay line of LAT cycles ---------------------------------> entry_x/y/gx/gy
```

One lane per sample column runs from the memory through a repeater to an AND
neuron; the population count then reduces the M lanes to one number.

### Pattern memory: replaying a bit string from a weight

`pattern_memory` is a trigger neuron and a replay neuron joined by one
synapse whose weight holds the data. The weight's sign bit and the bit below
it are 0; the string starts at bit S_PR-3. When the trigger fires, the weight
is added to the replay neuron's current. The replay neuron has leakage m = 2,
so its current doubles every timestep, and threshold 2^(S_PR-2)-1, so it fires
exactly when bit S_PR-2 of its current is set. An inhibitory self-synapse of
weight -2^(S_PR-1) removes that bit once it has been shifted one place
further up. Each timestep therefore pops the next bit of the string. The weight
itself is never changed, so the string can be replayed as often as needed,
and a new trigger exactly 3 cycles after the previous one (for a 3-bit
string) makes the replays follow each other without a gap.

This neuron must not reset its current on a spike (the general neuron model
does): the self-synapse does that job and a reset would erase the rest of the
string. Trigger in cycle t gives the first bit in cycle t+2.

`snp_memory` holds one such memory per (SNP, sample) and shares one trigger
per SNP, so a trigger replays a SNP's genotypes in all M columns at once. A
pair needs its first SNP on the repeater path and its second on the direct
path at the same time. This design keeps two copies of the table, an X role
and a Y role, written together; each role's outputs are OR-merged per column.

### Repeater and AND layer: generating the 9 combinations

In cycle 0 of a pair the controller triggers X once and Y in cycles 0, 3 and 6.
X's 3-bit string arrives at every column's `repeater`, which outputs each bit
three times (010 becomes 000111000), starting 3 cycles after the first bit.
Y's string arrives three times in a row (010010010). The `and_layer` holds
one AND neuron per column (threshold 1, two weight-1 synapses); the Y synapse
has delay 3 to line Y up with the repeater. In cycle q of the pair the AND
neuron of a sample fires exactly when its X genotype is q / 3 and its Y
genotype is q mod 3, so the 9 cycles carry the 9 table entries in the order
00, 01, 02, 10, ..., 22.

The repeater needs to know where a sequence starts, since a string may begin
with 0. A programmed sync spike, fired by the controller in the cycle of bit
1, provides that. This design does not build the repeater from a ring of
spike-repeater neurons and gate neurons, as the method describes; it keeps the
same function and timing but uses two alternating 3-bit capture registers and
a bit/repeat counter. The second register lets the next pair's string be
captured while the previous one is still being played.

The neuron version's delays do not all agree. If the input enters the ring
through a delay-1 synapse, as drawn, the path input, ring, gate, output takes 4
cycles. The stated overhead is 3, and the AND layer's delay-3 Y synapse only
lines up with 3, so this design uses 3. Working the drawing through does
support the rest of the description. In repeat q the gate that reads is ring
neuron (q mod (R-1))+1, so two phase neurons share gate 1. A gate spike sent
back with delay R-2 lands on a bit just after its last read, which clears it.

### Population count: constant depth per part, logarithmic overall

`tc_popc` counts L spikes in three neuron levels:

1. L neurons with thresholds 0, 1, ..., L-1, each seeing every input: c input
   spikes fire the first c of them (thermometer code).
2. L neurons; neuron j gets +1 from level-1 neuron j and -1 from every
   level-1 neuron above it, threshold 0: only neuron c fires (one-hot).
3. clog2(L+1) output neurons; output bit i listens to every level-2 neuron
   whose index has bit i set.

`tc_parity` is the classic depth-2 parity circuit. Level 1 has neurons with
thresholds 1, 3, 5, ..., so floor(c/2) of them fire. The output neuron
compares twice that count with c, which reaches it through delay-1 synapses.
The two match only for even c. In its original form (bias 1, threshold 0) the
output spikes on an even count.

`tc_binary_sum` adds n binary numbers in two levels. Output bit k is a
parity circuit whose weight-1 inputs are bit k of every operand; every lower
bit i of every operand also reaches it, with weight 1/2^(k-i). The whole part
of the resulting current is then the number of ones at position k plus the
carries into it, so its parity is bit k of the sum. Weights are integers, so
fractions are scaled by 2^(S_PR-1): 1/2^d becomes 2^(S_PR-1-d). This is why
the result may have at most S_PR-1 bits, the bound m <= 2^(S_PR-2) above.

Two details differ from a literal reading of the method, and both matter:

* **Output polarity.** A sum bit is 1 when the count is odd, but the parity
  circuit's output neuron spikes when it is even. The adder therefore uses an
  odd-detecting output neuron: weight +1 from the inputs, -2 from level 1,
  threshold just below 1, no bias (`tc_parity` with `ODD = 1`).
* **Thresholds with fractional currents.** Scaling the level-1 thresholds
  2j-1 by 2^(S_PR-1) would let a current of, say, 3.5 exceed 3 and fire
  neuron 2, giving floor(3.5/2) = 2 instead of 1 and the wrong bit. Here
  level-1 neuron j has threshold 2j * 2^FRAC - 1, so it fires when the whole
  part of the current is at least 2j. For whole-number currents this is
  exactly the original threshold 2j-1. Run with the literally scaled thresholds,
  the parity testbench fails on about 44% of the inputs that carry a
  fractional current.

`popc_tree` cuts the M inputs into parts of `POPC_L`, counts each with
`tc_popc` and adds the counts in a tree of `SUM_N`-input adders, each level
one bit wider. With the defaults that is 8 counters and three adder levels
(4, then 2, then 1 adder), 64 inputs, a 7-bit result and a latency of
3 + 2*3 = 9 cycles.

### Controller and entry stream

`pair_controller` walks through the pairs (X, Y), X < Y, in lexicographic
order, 9 cycles per pair, and fires the X and Y triggers and the repeater's
sync. Along with them it emits a tag (x, y, gx, gy) naming the entry that
enters the network in that cycle. The top delays the tag by the data path
latency

    LAT = 2 (memory) + 3 (repeater) + 1 (AND) + 3 + 2*D (population count)

which is 15 cycles for the defaults. The table entry stream is then
`entry_valid`, `entry_x`, `entry_y`, `entry_gx`, `entry_gy`, `entry_count`,
with `entry_last` on the final entry. Entries are not stored on chip: an
external collector is expected to take them as they appear, one per cycle.

## Using the top

1. Hold `rst_n` low for a cycle, then high.
2. Write every genotype: `load_we` = 1, `load_snp`, `load_sample`, `load_gt`
   (0, 1 or 2), one cell per cycle. An assertion forbids loading while
   `busy`.
3. Pulse `start`. The first trigger fires in the next cycle; entries follow
   LAT cycles later, one per cycle, 9 * N_SNP(N_SNP-1)/2 of them. `busy`
   falls after the last one.
4. For the other class (controls after cases) reload the memory and start
   again.

Timing of the blocks, with t the cycle in which the input is applied:

| block | latency | throughput |
|---|---|---|
| `lif_neuron` | spike in t+1 | every cycle |
| `pattern_memory` | bit k of the string in t+1+k | one 3-bit replay per 3 cycles |
| `repeater` | bit k, copy q in t_sync+3+3k+q | one sequence per 9 cycles |
| `and_layer` | t+1 (Y path t+4) | every cycle |
| `tc_parity`, `tc_binary_sum` | t+2 | every cycle |
| `tc_popc` | t+3 | every cycle |
| `popc_tree` | t+3+2D | every cycle |

## Files

`rtl/snn_pkg.sv` holds the genotype type, the genotype-to-weight encoding
and the tree size functions (`tree_levels`, `tree_width`, `tree_latency`).
Each other module is in `rtl/<module>.sv`; the top is `epistasis_top`.

Every module has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=N failures=F`. The end-to-end tests share
`tb/epistasis_e2e.sv`: `tb_epistasis_top` runs it at 6 SNPs and 16 samples
(parts of 4, two adder levels), and `tb_epistasis_full` at the defaults. Each
does two complete runs with different random tables, including constant SNPs
so that counts of 0 and of all samples occur. It checks every entry against
counts computed in the testbench, the latency, the gap-free stream, and that
each pair's 9 entries add up to M.

To simulate with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/snn_pkg.sv tb/tb_epistasis_top.sv --top-module tb_epistasis_top
./obj_dir/Vtb_epistasis_top
```

and the same with any other testbench name. The reduced end-to-end test
builds and runs in well under a minute. The default-size one instantiates
2 x 1024 pattern-memory neurons and about 600 other neurons; Verilator's C++
build of it takes about ten minutes on one core (the run itself takes
seconds), so pass `-j` to build in parallel.

## How far to trust it

Checked in simulation:

* each block against an independent reference (the neuron equation; the
  stored strings; the column masks of a random table; the repeat pattern for
  sequence lengths 3 and 4 with and without gaps; AND with delay 3; parity,
  popcount and multi-operand sums against integer arithmetic, including
  all-ones operands; the tree at 64/8/2 and 27/3/3; the pair schedule);
* the whole engine at the default size and at a reduced size, two runs
  each, every entry compared.

Not done: no timing or area closure, no mapping onto a real neuromorphic
processor (its network-on-chip, core limits and spike routing costs are not
modelled), and no formal proof beyond the arguments above.

Where this RTL departs from, or adds to, the method it implements:

* the repeater keeps the described function and timing but not its neuron
  structure;
* the SNP table is held twice (X and Y roles);
* the binary-sum bits use an odd-detecting output neuron and corrected
  level-1 thresholds (see above);
* the pattern-memory neuron does not reset on a spike;
* the controller, the pair order, the load port, the entry tags and the
  saturation of currents on overflow are this design's own;
* the neuron fan-in and fan-out limits and the maximum synaptic delay are
  not modelled, since no values are given for them. At the default sizes the
  largest in-degree is 16 (the per-column merge of the 16 SNPs of one role),
  the largest out-degree is 64 (a SNP trigger reaching every sample), and the
  longest delay is 3. Only the weight-precision bound m <= 2^(S_PR-2) is
  checked, at elaboration;
* only second-order interactions are built. Third order would need a second
  repeater stage (each bit repeated 9 times) and more triggers per
  combination.
