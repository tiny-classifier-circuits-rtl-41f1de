# Tiny Classifier accelerator

A Tiny Classifier replaces a trained machine-learning model for tabular data
with a small combinational circuit. Offline, an evolutionary search (the
Tiny Classifier method of Iordanou et al., "Tiny Classifier Circuits: Evolving
Accelerators for Tabular Data") looks through graphs of a few hundred logic
gates. It keeps the graph whose outputs best predict the class of the
training rows. The winning graph *is* the model: there are no weights, no
multipliers and no memory in the datapath. The prediction is the value
reached when the encoded feature bits of one row flow through the gates.

This repository is RTL for the hardware side of that method:

* a classifier circuit that builds any such graph from a parameter,
* the local input and output buffers that sit around it,
* a simple sequencer that classifies a buffer of rows, one row per clock,
  on one or more identical lanes.

The evolutionary search and the encoding of raw features into bits are
software. They are not included here. Until a trained graph is supplied, the
default graph is one built by the method's own random initialisation step.

```
             host writes rows                          host reads classes
                   |                                          ^
   lane 0   +--------------+   +--------------------+   +-----------+
            | input buffer |-->| classifier circuit |-->| out buf 0 |
            | (used bits)  |   |  (sea of gates)    |-->| out buf 1 |..
            +--------------+   +--------------------+   +-----------+
   lane 1   ... identical, same graph ...
                   ^ row index               sequencer: start/busy/done
```

## 1. The classifier graph

### Representation

A classifier is a directed acyclic graph with three kinds of node:

| node kind | count | meaning |
|---|---|---|
| input | `N_INPUTS` | one encoded feature bit |
| gate | `N_GATES` (300 by default) | a 2-input function from F = {and, or, nand, nor} |
| output | `N_OUTPUTS` | one bit of the binary class code; it points at one input or gate node |

Nodes are numbered in one index space. Input bit `k` is node `k`. Gate `g`
is node `N_INPUTS + g`. Gate `g` may read only nodes with smaller numbers,
so the graph cannot contain a loop. The same rule makes a single pass in
index order enough to evaluate it. All four functions are symmetric, so the
order of a gate's two sources does not matter.

The whole graph travels as one parameter of type `tc_pkg::genome_t`, a
packed struct of four arrays:

| field | per entry | meaning |
|---|---|---|
| `fn[g]` | `gate_fn_e` (2 bits) | `FN_AND`, `FN_OR`, `FN_NAND`, `FN_NOR` |
| `src_a[g]`, `src_b[g]` | 14-bit node index | the two sources of gate `g` |
| `out_src[o]` | 14-bit node index | the node that drives class bit `o` |

The capacity is 512 gates, 8192 inputs and 8 outputs. That is enough for a
400-gate circuit, for 1637 features at 4 bits each, and for 256 classes.
Entries past the configured counts are ignored. The package function
`genome_ok` checks that a graph is legal for the configured sizes.
`tc_classifier` stops elaboration with an error when it is not.

### From graph to gates

`tc_classifier` evaluates the graph in one `always_comb` loop: node values go
into a vector, and each gate writes its result at its own index. Every index
is a parameter, so the loop elaborates into plain wiring and 2-input gates.
The result is the same circuit that one `assign` per gate would give. Gates
with no path to an output are inactive: they are still in the description,
and synthesis removes them. In an evolved graph that inactive material is
normal. It is what lets the search drift between solutions of equal
accuracy.

### Plugging in a trained circuit

Take the graph exported by the evolutionary search, with its node numbering
mapped as above. Write it into a `genome_t`, for example with a constant
function in your own package. Then pass it as the `GENOME` parameter of
`tc_accel_top`, together with the matching `N_FEATURES`, `BITS_PER_INPUT`,
`N_GATES` and `N_OUTPUTS`. `tb/tb_workload_led.sv` shows this for a
hand-built graph.

### The default graph

No trained circuit comes with the RTL. The default `GENOME` is
`tc_pkg::random_genome(N_INPUTS, N_GATES, N_OUTPUTS, SEED)`, which follows
the method's initialisation step:

* each gate gets a function drawn uniformly from F,
* each gate gets two sources drawn uniformly from the nodes before it,
* each output is wired to a node drawn uniformly from all input and gate nodes.

The random source is xorshift32. The default `SEED = 105` gives a 300-gate
graph with 40 active gates that reads 13 of the 16 input bits. It is a legal
circuit of realistic size. It is not a trained predictor.

## 2. Input buffer and input pruning

A row of the input table is `N_FEATURES x BITS_PER_INPUT` bits. Feature `f`
occupies bits `[f*BITS_PER_INPUT +: BITS_PER_INPUT]`. An evolved circuit
usually reads only some of those bits, so the input buffer stores only those
bits.

`tc_pkg::active_inputs` walks the graph backwards from the outputs and
returns the mask of input bits that reach an output. `tc_accel_top` gives
this mask to every `tc_input_buffer` as `USED_MASK`. The buffer's storage row
is `popcount(USED_MASK)` bits wide:

* a write takes a full row and drops the unused bits,
* a read returns a full row with the unused bits at 0, which the circuit
  never looks at.

For the default graph, a 16-bit row is stored in 13 bits. The host interface
stays full-width, so the host does not need to know which bits a particular
circuit uses.

The buffer is a register file: synchronous write, combinational read, no
reset. `DEPTH` rows (150 by default) hold one batch of inferences.

## 3. Output encoding and output buffers

The class index is coded in binary on `N_OUTPUTS = ceil(log2(classes))` bits.
A binary problem uses 1 bit, a 10-class problem 4 bits. Each class bit has
its own one-bit-wide `tc_output_buffer` of `DEPTH` entries. A lane therefore
holds `N_OUTPUTS` output buffers. They are written by the sequencer and read
by the host.

## 4. Lanes and the sequencer

`LANES` identical lanes share one graph. Each lane has its own input buffer,
classifier and output buffers, so a run classifies `LANES` rows per clock.
The host chooses the lane on its write and read ports. With `LANES = 1`, the
lane select inputs are ignored.

Run protocol:

1. While `busy` is low, write rows with `in_wr_en`, `in_wr_lane`,
   `in_wr_addr` and `in_wr_row`, one per clock.
2. Drive `start` high for one cycle with `num_rows`. Row indices
   `0 .. num_rows-1` are classified in every lane. `num_rows` above `DEPTH`
   is clamped to `DEPTH`.
3. `busy` rises in the next cycle and stays high for exactly `num_rows`
   cycles. In each of those cycles, row `r` is read from the input buffer,
   goes through the gates, and is written to the output buffers at the
   closing clock edge.
4. `done` pulses for one cycle in the cycle after the last row. That is
   `num_rows + 1` cycles after the edge that sampled `start`. With
   `num_rows = 0`, `done` pulses in the next cycle and nothing is written.
5. Read the predictions with `out_rd_lane` and `out_rd_addr`: `out_rd_class`
   is combinational.

Writing an input buffer or raising `start` while `busy` is high breaks the
protocol. Two assertions in `tc_accel_top` catch it. Rows beyond `num_rows`
keep their old predictions.

The critical path is the deepest chain of active gates, plus one buffer read
and one buffer write. There is no pipelining. A graph can be at most
`N_GATES` levels deep, and the active part of a 300-gate graph is usually far
shallower.

## 5. Parameters

| parameter | default | where the default comes from |
|---|---|---|
| `N_FEATURES` | 4 | the `blood` dataset (4 features, 2 classes), one of the two designs the method's authors built as chips |
| `BITS_PER_INPUT` | 4 | the method reports results at 2 and at 4 bits per feature |
| `N_INPUTS` | 16 | `N_FEATURES x BITS_PER_INPUT` |
| `N_GATES` | 300 | the method's gate budget |
| `N_OUTPUTS` | 1 | 2 classes |
| `DEPTH` | 150 | this design: the 20 % test split of `blood` (748 rows) |
| `LANES` | 1 | the basic single-circuit accelerator |
| `SEED`, `GENOME` | 105, random initial graph | this design, because no trained graph is available |

Sizing other datasets is arithmetic. For example, `led` (7 binary
features, 10 classes) needs `N_FEATURES = 7`, `BITS_PER_INPUT = 1` and
`N_OUTPUTS = 4`. A dataset with 22 features at 2 bits needs 44 input bits.
Only the bits the circuit uses are stored. For a 2-class table with at most
8 features at 2 bits, or 4 features at 4 bits, the defaults already fit.

## 6. What follows the method and what is this design's own

Taken from the method:

* the graph representation and the gate set {and, or, nand, nor},
* the 300-gate budget,
* the combinational classifier,
* input buffers sized by the bits the circuit actually consumes,
* one one-bit output buffer per bit of the encoded class,
* identical circuits in parallel, each with its own input buffer,
* the random initialisation used for the default graph.

Chosen here, where the method says nothing:

* 2-input gates,
* the node numbering, `genome_t` and its capacity,
* the xorshift32 generator and the default seed,
* binary class encoding, and the bit order of features within a row,
* the buffer depth and register-file style (combinational read, no reset),
* per-lane output buffers,
* the start/busy/done sequencer and its host ports,
* one inference per clock.

Not included:

* **The evolutionary search.** It is offline software.
* **The feature encoders.** Equal-width and equal-population bucketing, gray
  and one-hot codes are applied in software before rows reach the input
  buffer. Their bucket edges depend on the data.
* **Any host or SoC fabric.** The ports in section 4 are where a processor
  or DMA engine would connect.
* **Pads and physical design** of a fabricated chip. They depend on the
  process, and nothing about them is needed to use the logic.

## 7. Verification

| testbench | checks |
|---|---|
| `tb_tc_pkg` | gate truth tables; random graphs legal and using all four functions; forward edges rejected; active inputs, active gates and buffer packing on a hand graph; 40 active gates and 13 used inputs in the default graph |
| `tb_tc_classifier` | hand-built 7-gate graph against direct Boolean expressions on all inputs; a 300-gate random graph against a software walk of the graph on 400 random rows |
| `tb_tc_input_buffer` | storage width equals the mask's popcount; read-back equals written row AND mask; writes with `wr_en` low are ignored |
| `tb_tc_output_buffer` | read-back against a model; writes with `wr_en` low are ignored |
| `tb_tc_accel_top` | 3 lanes, 8 inputs, 60 gates, 2-bit classes, 16-row buffers: every prediction against the software walk; busy/done cycle counts; rows with all unused bits flipped; partial, zero-length and over-depth runs; each of these mechanisms must occur |
| `tb_tc_accel_full` | the accelerator at its default parameters: 150 rows in one run, done after 151 cycles, every prediction against the walk |
| `tb_workload_sizes` | accelerators sized for three table shapes of the evaluation (6548 inputs with 1084 rows; 32 inputs with a 4-bit class and 297 rows; 476 inputs with 6893 rows), random rows and random initial graphs, every prediction against the walk, rows fed in 150-row batches |
| `tb_workload_led` | `led` workload: 500 generated seven-segment rows with 10 % segment noise, classified in five 100-row runs by a hand-built 78-gate graph; every prediction against a table lookup |

The reference model `tb_ref_pkg::walk` evaluates a graph node by node with
integer arithmetic. It shares only the graph with the RTL. The led graph is
an exact-match decoder, so its accuracy against the true digit, which is
printed, is limited by the noise. It says nothing about the accuracy of an
evolved circuit.

Each testbench ends with a line `TB_RESULT checks=N failures=M`. To run one
with Verilator 5:

```
verilator --binary --timing --assert \
  rtl/tc_pkg.sv rtl/tc_classifier.sv rtl/tc_input_buffer.sv \
  rtl/tc_output_buffer.sv rtl/tc_accel_top.sv \
  tb/tb_ref_pkg.sv tb/tb_tc_accel_top.sv --top-module tb_tc_accel_top
./obj_dir/Vtb_tc_accel_top
```

For `tb_workload_sizes`, add `tb/tb_size_runner.sv`. For `tb_workload_led`,
leave out `tb_ref_pkg.sv`. For the block tests, list only the package and the
block.

Lint with `verilator --lint-only -Wall` reports only width and unused-bit
warnings:

* the 14-bit node indices select bits of narrower node vectors, and the
  graph check guarantees every index is in range;
* the `genome_t` constants are wider than Verilator's replication limit;
* the graph helpers do not read the output field of `genome_t`;
* the input buffer does not read the row bits the circuit does not use.
