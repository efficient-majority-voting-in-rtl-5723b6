# Logarithmic-time majority voting and a random forest engine built on it

A random forest classifies an input by letting many decision trees vote and
taking the class named most often. In hardware the trees are easy to run in
parallel, so the vote itself tends to become the bottleneck: sorting-network
approaches need a number of cycles that grows linearly with the number of
voters T. The majority decision implemented here needs a number of cycles
that grows only with log2(T). It counts the votes per class with adder trees
and then finds the largest count without any comparator: it strips the
largest count's binary digits from the top, one per clock cycle, subtracting
the same amount from every count, until all counts are negative.

This RTL contains that majority decision in two forms (iterative, and fully
pipelined) and a complete random forest engine around it: T small tree
processors, each walking one tree stored in block RAM at three cycles per
level, feeding one majority decision block. The default sizes are those of a
handwritten digit (MNIST) classifier: 40 trees with 14 levels of decision
nodes, 28 x 28 = 784 input coordinates and 10 classes.

The architecture follows the published description of this design
(Baumgartner, Huemer, Lunglmayr, "Efficient Majority Voting in Digital
Hardware"). Where that description is silent, the choices made here are
listed in [Departures and own choices](#departures-and-own-choices).

## The majority decision

### Counting

Each vote y_i (0..K-1) is decoded into a one-hot vector of K bits. Bit j of
all T one-hot vectors goes into adder tree j, so K adder trees in parallel
produce the K class counts. The trees use the narrowest adders that cannot
overflow: stage 1 adds 1-bit values into 2-bit sums, every further stage is
one bit wider, and the last of the ceil(log2 T) stages produces a
(ceil(log2 T)+1)-bit count. Every stage ends in a register; the decoders do
not. So the counts appear ceil(log2 T) cycles after the votes
(`class_counter.sv`, `adder_tree.sv`).

### Finding the largest count by subtraction

Each count gets a 0 sign bit in front and is loaded into a register. Then,
once per cycle:

1. every count that is still non-negative is ANDed in (the AND gates take
   the inverted sign bit), and the results are ORed together bit by bit;
2. a leading one detector (`lod.sv`) keeps only the highest set bit of that
   OR, which is the highest set bit of the largest count;
3. this power of two is subtracted from every count.

Since the same amount is taken from all counts, their order never changes.
The largest count loses exactly its top remaining '1' bit each cycle and
stays non-negative; a smaller count goes negative, at the latest, in the
cycle that removes the highest bit in which it differs from the largest one,
and from then on the OR ignores it. When the largest count has been worn down to zero, the OR is zero;
the detector then outputs 1, and that last subtraction makes every count
negative. The classes still non-negative one cycle before that are exactly
the classes with the maximum count. A priority encoder picks the highest
class number among them (the draw rule), and because its output is
registered, its value in the cycle in which "all negative" is first seen
belongs to the cycle before: that is the result.

Worked example with 40 votes: counts 13 (class 3), 11 (class 7), 9 (class 1),
7 (class 0), all others 0.

| cycle | OR of non-negative counts | subtract | class 3 | class 7 | class 1 | class 0 |
|------:|---------------------------|---------:|--------:|--------:|--------:|--------:|
| load  |                           |          | 13      | 11      | 9       | 7       |
| 1     | 01111                     | 8        | 5       | 3       | 1       | -1      |
| 2     | 00111                     | 4        | 1       | -1      | -3      | -5      |
| 3     | 00001                     | 1        | 0       | -2      | -4      | -6      |
| 4     | 00000                     | 1        | -1      | -3      | -5      | -7      |

After cycle 3 only class 3 is non-negative; after cycle 4 all counts are
negative, and the registered encoder output is 3. The number of subtractions
is popcount(13) + 1 = 4.

Widths: a count needs ceil(log2 T)+1 bits, the registers ceil(log2 T)+2
with the sign. The most negative value reached is -(max+1) >= -(T+1), which
fits.

### Iterative version (`majority_iterative.sv`)

This is the loop above with one set of K subtractors. With `in_valid` in
cycle 0 and A = ceil(log2 T):

| event | cycle |
|-------|-------|
| counts at the adder tree outputs | A |
| counts in the subtraction registers | A+1 |
| `out_valid`, `out_class` | A + popcount(max count) + 2 |

The best case is a power-of-two maximum, A+3 cycles; the worst is a maximum
of the form 2^k-1, at most A + floor(log2 T) + 2 cycles. For T = 40 that is 9
to 13 cycles. The adder trees are pipelined, so a new vote set may be applied
every A+1 cycles (7 for T = 40); the loop of the previous set is always
finished by the time the next counts are loaded. An assertion reports a
start that comes too early.

### Pipelined version (`majority_pipelined.sv`)

The loop is unrolled into S registered stages, each with its own OR, LOD and
K subtractors. S = floor(log2(T+1)) is the largest number of '1' bits any
count 0..T can have, so S stages are always enough. A stage whose subtraction
would leave no count non-negative passes its input on unchanged and marks it
final; all later stages pass a final set through. The encoder with its
register follows the last stage. A vote set can be applied in every cycle and
each result comes A + S + 1 cycles later (12 for T = 40). The price is S sets
of K subtractors and registers instead of one.

## The tree processor (`tree_processor.sv`)

Nodes are numbered breadth-first from 1 at the root, so the children of node
n are 2n and 2n+1. The node number is the address into two tables, the split
coordinate memory (which element of x the node tests) and the split value
memory (its threshold, or at a leaf the class). A third memory holds x. A
level takes three cycles:

1. read both tree tables at the node address;
2. read x at the split coordinate just read;
3. compare A = x[coord] with B = split value; the new node address is the
   old one shifted left by one, with the LSB set if A <= B is false.

After l levels the address lies in the leaf level; one more cycle reads the
split value memory there, and its low bits are the vote. So a tree takes
3l+1 cycles (43 for l = 14), and the tree processor accepts the next start
in the same cycle its vote appears.

Trees must be stored complete to depth l: a leaf that the training put higher
up has to be copied to all leaf positions below it. Node address 0 is unused.
With the default sizes each tree processor holds 32768 x 10 bits of split
coordinates, 32768 x 8 bits of split values and 784 x 8 bits of x.

## The forest engine (`rf_engine.sv`, top)

T tree processors run in lock step on the same input vector (each has its own
copy of x, written to all of them at once) and deliver their votes in the
same cycle. The votes go straight into the majority decision, iterative by
default or pipelined with `MAJORITY_PIPELINED = 1`.

Cycle budget with the iterative majority decision, start in cycle 0:

| | T = 40, l = 14 |
|---|---|
| votes valid | 3l+1 = 43 |
| result, worst case | 3l + ceil(log2 T) + floor(log2 T) + 3 = 56 |
| next start accepted | every 3l+1 = 43 cycles |

Because a tree walk (43 cycles) takes longer than a majority decision (at
most 13), the next vector can start while the previous vote is still being
decided. At a 303 MHz clock, 43 cycles per image is about 7 million
classifications per second.

### Interface

| port | dir | width (defaults) | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `x_we`, `x_waddr`, `x_wdata` | in | 1, 10, 8 | write one coordinate of x into every tree |
| `t_we`, `t_tree`, `t_waddr`, `t_wcoord`, `t_wvalue` | in | 1, 6, 15, 10, 8 | write node `t_waddr` of tree `t_tree` (coordinate and value together) |
| `start` | in | 1 | classify the vector now in the x memories; taken when `ready` |
| `ready` | out | 1 | trees idle (also high in the cycle the votes appear) |
| `votes_valid`, `votes[T]` | out | 1, 40 x 4 | every tree's vote, for observation |
| `class_valid`, `class_out` | out | 1, 4 | the forest's decision |

For leaves, `t_wvalue` holds the class in its low ceil(log2 K) bits. x must
not be rewritten while a walk is running; loading is not part of the cycle
counts above.

### Parameters

| parameter | default | meaning |
|---|---|---|
| `NUM_TREES` (T) | 40 | trees, and votes of the majority decision |
| `TREE_LEVELS` (l) | 14 | levels of decision nodes; tree memories hold 2^(l+1) words |
| `NUM_CLASSES` (K) | 10 | classes |
| `NUM_COORDS` (p) | 784 | length of x |
| `X_WIDTH` | 8 | bits per element of x and per split value |
| `MAJORITY_PIPELINED` | 0 | 0: iterative, 1: pipelined majority decision |

The majority modules take `NUM_VOTES` and `NUM_CLASSES` and work at any size;
they have been simulated from T = 4, K = 2 to T = 512, K = 500.

Resources at the defaults, from a generic synthesis: about 23.8 Mbit of
memory (40 x 32768 x 18 + 40 x 784 x 8 bits) and about 1100 flip-flops. The
published FPGA implementation reports 28.03 Mbit of block RAM and 2495
registers; the RAM difference is plausibly block granularity, and the
register figure includes data handling around the engine that is not part of
this RTL.

## Departures and own choices

* Branch direction. The textual description says the node number is
  incremented "if the node comparison was true"; the block diagram shows a
  comparator `A<=B` whose true output selects the constant 0. This RTL
  follows the diagram: x[coord] <= threshold goes to 2n, otherwise to 2n+1.
  Trees trained with the opposite convention need their thresholds or
  children swapped when loaded.
* Number of pipelined stages. The description says the loop is unrolled into
  ceil(log2 T) stages, but gives a latency of ceil(log2 T) + floor(log2 T) + 1.
  This RTL follows the latency: floor(log2(T+1)) stages, which always
  suffices, and no extra load register in front of the first stage. For
  T = 2^k - 1 this is one stage and one cycle more than the formula.
* Leading one of zero. The detector returns 1 for an all-zero input; that
  is what the "one more cycle to make all counts negative" requires, but the
  description does not say how it is done.
* "All negative" detection. It is made on the subtractor outputs and
  registered, not on the registers themselves. `out_valid` comes in the same
  cycle either way, but this way a decision whose last step coincides with
  the loading of the next vote set is still reported.
* Leaf detection by a level counter, trees stored at full depth, leaf class
  in the low bits of the split value word.
* Word widths: 8-bit x and thresholds (grey-level pixels), 10-bit
  coordinates. Not given in the description.
* Memory fill ports, the start/ready/valid handshake, resets, and the odd
  element of an adder stage being carried through a register: not described,
  chosen here.
* Not included: the trained forest contents (not available here; the tests
  use random trees), and whatever moves images and results on and off the
  chip.

## Verification

Every module has a self-checking testbench in `tb/` that compares against a
reference written independently (a plain count-and-compare majority vote and
a software tree walk, in `tb_ref_pkg.sv`) and checks cycle counts:

| testbench | what it covers |
|---|---|
| `tb_sync_ram` | read latency, read-before-write |
| `tb_lod` | all 7-bit and 3-bit inputs |
| `tb_class_counter` | counts and latency at T = 40 and T = 7, one vote set per cycle |
| `tb_majority_iterative` | T = 40, K = 10: best and worst cases, draws, starts every A+1 cycles |
| `tb_majority_pipelined` | T = 40, K = 10: one vote set per cycle, worst cases, draws |
| `tb_majority_sweep` | both variants at (T, K) = (4, 2), (7, 5), (64, 15), (128, 100), (512, 2), (16, 500) |
| `tb_tree_processor` | one full 14-level tree, 43-cycle latency and start interval |
| `tb_rf_engine` | whole engine at 8 trees / 5 levels, iterative and pipelined side by side, forced best/worst/draw cases, overlapping starts |
| `tb_rf_full` | whole engine at the default size: 40 complete 14-level trees, 56-cycle worst case, 43-cycle start interval, a 20:20 draw |

Each prints `TB_RESULT checks=N failures=M` and stops on a watchdog if it
hangs. With verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/rf_pkg.sv tb/tb_ref_pkg.sv tb/tb_rf_full.sv --top-module tb_rf_full
./obj_dir/Vtb_rf_full
```

`tb_rf_full` spends most of its 2.3 million cycles filling the tree memories
and runs in a few seconds. Replace the testbench name to run any other; all
need `rtl/rf_pkg.sv` and `tb/tb_ref_pkg.sv` first on the command line.

## Files

| file | contents |
|---|---|
| `rtl/rf_pkg.sv` | default sizes, `flog2`, number of pipelined stages |
| `rtl/sync_ram.sv` | block RAM with registered read |
| `rtl/tree_processor.sv` | one tree walker with its three memories |
| `rtl/adder_tree.sv` | registered minimum-width popcount tree |
| `rtl/class_counter.sv` | decoders and K adder trees |
| `rtl/lod.sv` | leading one detector |
| `rtl/majority_iterative.sv` | iterative majority decision |
| `rtl/majority_pipelined.sv` | pipelined majority decision |
| `rtl/rf_engine.sv` | top: T tree processors and a majority decision |
| `tb/tb_ref_pkg.sv`, `tb/majority_sweep_point.sv` | testbench reference models and helper |
