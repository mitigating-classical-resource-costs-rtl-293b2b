# A pipelined predecoder for qLDPC error correction

A fault-tolerant quantum computer must decode error syndromes in real time,
for thousands of logical qubits at once. The decoders that work for general
quantum LDPC (qLDPC) codes are slow and expensive: belief propagation with
ordered-statistics post-processing (BP-OSD), or chains of BP runs (RelayBP).
They have to be shared between logical qubits, and the qubits then compete
for them. Most syndromes, however, come from a single fault: one edge, or
hyperedge, of the decoding graph. A small circuit can decode those on its
own and pass only the rare hard cases to the big decoder.

This repository holds the RTL of such a *non-syndrome-modifying* predecoder,
built from the structure described in the paper "Mitigating Classical Resource Costs in Quantum
Error Correction via Generalized qLDPC Predecoding" (the authors call their
framework Arqade). A block of syndrome bits goes in. Exactly one of two
things comes out:

* **fully predecoded.** Every detection event is explained. The output is the
  set of logical observables to flip, which is a Pauli-frame update. Nothing
  goes to the second-level decoder.
* **complex.** Something is left over. The predecoder's own guesses are
  dropped, and the *original* syndrome goes to the second-level decoder.

The second-level decoder is not part of this RTL.

## Predecoding primitives

The predecoder is made of *primitives*. There is one for each edge of the
decoding graph that it is able to correct. A primitive has two sets:

* `S`: the syndrome bits at the ends of its edge.
* `O`: the logical observables that a fault on that edge flips.

Every primitive has the same rule. If all bits of `S` are set, it clears
them and flips the observables in `O`. This is `predecoding_primitive`: an
AND gate over `|S|` inputs, gating two constant masks. A primitive is
described by the packed struct `arqade_pkg::prim_t`. The struct holds up
to `MAX_S` = 8 syndrome indices, an observable mask of up to `MAX_OBS` = 16
bits, a stage number and a class.

## Why a pipeline: conflicts and priority

Each primitive reads some bits of a shared syndrome buffer, changes them and
writes them back. Two primitives *conflict* when their sets `S` share a
bit. Conflicting primitives must not act in the same cycle, because each
would act on a buffer that the other is changing. So the primitives are
spread over pipeline stages:

* Within a stage, no two primitives share a syndrome bit. All of them act
  in parallel in one clock.
* Stages run in order of priority. Primitives for common faults come
  first. The order of the classes is time-like (measurement errors), then
  space-like, spacetime-like, hook-like.
* A primitive whose `S` is a proper subset of another's must run *after*
  it. If it ran first, it would grab the shared bits and leave the larger
  fault unexplained.

In the original work, the stages come from colouring a graph offline. Each
node is a primitive, and an edge joins two primitives that conflict. The
colouring uses an SMT solver with clique and priority constraints, and the
colours become the stages. That tool flow is software and is not part of
this RTL. What the RTL takes from it is the *result*: a table that gives
each primitive its stage.

`predecode_stage` gathers the primitives of one stage when the design is
elaborated. For each syndrome bit it finds the single primitive that may
clear that bit. If two primitives of the stage share a bit, elaboration
stops with `$error`. A design that elaborates is therefore hazard-free by
construction. The stage works out the new syndrome and observable values,
and a `syndrome_buffer` register stores them. That register holds:

* the working syndrome (the bits still unexplained),
* the observable flips found so far,
* an untouched copy of the input block.

`complexity_detector` follows the last stage. It ORs the bits that are left
over and chooses between the two results described above.

## The two-round block and the default table

A fault in a circuit can trigger detectors in two consecutive measurement
rounds. A block of two rounds is therefore enough to see every single
fault, and the same primitives can be used again for every such block. The
predecoder's input is one block of two rounds: `NSYN = 2*NCHK` bits. Bit
`c` is check `c` in the first round, and bit `NCHK+c` is the same check in
the second round. The RTL does not describe how a stream of rounds is cut
into blocks. It takes ready-made blocks.

The original flow builds the table from a detector error model (DEM). Stim
produces that DEM from a real measurement circuit under circuit-level
noise; it depends on the exact circuit and has no closed form. So `arqade_pkg` computes a
table in closed form for one code: the **rotated surface code of distance
`D`**, in a Z-basis memory experiment, under a **phenomenological** noise
model. That model has X errors on data qubits and measurement errors on Z
checks.

### Geometry

* The data qubits are `(i,j)`, with `0 <= i,j < D`.
* A plaquette `(a,b)` covers the qubits `(a..a+1, b..b+1)`.
* The plaquette is a Z check when `a+b` is even and one of these holds:
  * it is in the bulk: `0 <= a,b <= D-2`;
  * it is a two-qubit plaquette on the top or bottom edge: `a = -1` or
    `a = D-1`, with `0 <= b <= D-2`.
* Each of the `D+1` rows holds `(D-1)/2` checks. Check `(a,b)` has index
  `(a+1)*(D-1)/2 + b/2`.
* The logical observable is Z along column 0. An X error on `(i,0)` flips
  it.

### Primitives and stages

| stage | class | primitives | `S` | `O` |
|---|---|---|---|---|
| 0 | time-like | one per check | `{c, NCHK+c}` | none |
| 1-4 | space-like | one per qubit in columns 1..D-2, per round. Stage = `1 + 2*(i mod 2) + (j mod 2)` | the qubit's two checks | none |
| 5 | space-like, subset | one per boundary check of columns 0 and D-1, per round | one check | set for column 0 |

The four qubits of a check have four different coordinate parities. This
makes stages 1-4 conflict-free. Four is also the largest clique of the
space-like conflict graph, so no schedule can use fewer stages for these
primitives. Each one-check boundary primitive is a subset of the two-check
primitives next to it, so it goes last.

Two boundary qubits can be attached to the same check. Their `S` and `O`
are then identical, so they are degenerate and share one primitive.

For `D` = 15 the table has:

* 112 checks
* a 224-bit block
* 534 primitives, in 6 stages

### Using another code

To target another code, replace the `sc_*` functions in `arqade_pkg` with
its table: `nprim`, `nsyn`, `nobs`, `nstages`, and the k-th `prim_t`. The
stage, the pipeline and the detector do not depend on the code. Each entry
must give `S`, `O` and a stage number. The stage numbers must respect the
rules above, and the elaboration check enforces the conflict rule.

## Interface and timing of `arqade_predecoder`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous reset, active low |
| `in_valid` | in | 1 | a block is presented this cycle |
| `in_syn` | in | `NSYN` | the two-round block |
| `out_valid` | out | 1 | result of a block |
| `out_complex` | out | 1 | 1 = the block is deferred to the second level |
| `out_obs` | out | `NOBS` | observable flips; zero when complex |
| `out_l2_syn` | out | `NSYN` | the original block when complex, otherwise zero |
| `stage_hit` | out | `KEEP_STAGES` | a primitive of stage s fired this cycle |

Parameters:

* `D` = 15.
* `KEEP_STAGES`: all 6 stages by default.
* `NSYN` and `NOBS` follow from `D`.

Timing:

* A new block can be accepted on every clock. There is no back-pressure.
* A result appears `KEEP_STAGES + 1` clocks after its block: one register
  per stage, plus the detector's output register.
* For a given end-to-end latency budget, the clock rate therefore grows
  with the depth of the pipeline. The original work sizes its ASIC clock
  this way for targets of 100 ns and 1 µs.

## Stage removal

The lowest-priority stages sit at the end of the pipeline. Dropping the
last stages (`KEEP_STAGES < sc_nstages(D)`) has these effects:

* Fewer registers, lower area and lower power.
* More blocks are deferred, so coverage falls.
* **No correction changes.** A block that is still fully predecoded gets
  the same correction, because the kept stages run in the same order as
  before.

The end-to-end testbench checks this property on every block. In the
default surface-code table, the last stage holds the boundary primitives.
Without it, a single fault on a boundary qubit is deferred.

The sweep testbench measures what removal costs at d = 15. Every data qubit
in each of the two rounds, and every measurement, fails independently with
probability p. The table gives the share of 3000 blocks that were fully
predecoded, with empty blocks counted as predecoded:

| p | 3 stages | 4 stages | 5 stages | 6 stages |
|---|---|---|---|---|
| 0.001 | 78.6% | 85.0% | 93.5% | 99.5% |
| 0.003 | 48.2% | 60.8% | 80.2% | 96.4% |
| 0.01 | 7.9% | 16.1% | 38.6% | 71.4% |

These figures hold for this phenomenological table only. They are not the
circuit-level numbers of the original work.

## Where this RTL departs from the original design

* **The table is phenomenological, not circuit-level.** It has no
  spacetime-like and no hook-like primitives. The enum still lists those
  classes. The pipeline therefore has 6 stages. The original work reports 9
  stages for the surface code, which comes from its circuit-level models.
  Accuracy and coverage figures for circuit-level noise do not carry over.
* **Only the surface code has a built-in table.** The original flow also
  generates predecoders for colour, bivariate-bicycle (BB), generalized
  bicycle and other codes. Their tables need those codes' circuit DEMs.
* **The stage colouring is written in closed form.** No solver finds it.
  It is still optimal for this table: 4 space-like stages, the clique
  bound.
* These are this design's own choices, not taken from the original work:
  * the output format,
  * carrying the original syndrome along the pipeline,
  * reset behaviour,
  * one block per clock with no back-pressure,
  * the `stage_hit` outputs.

## Simulating

All code is SystemVerilog-2017. The testbenches print
`TB_RESULT checks=N failures=M`, and each has a watchdog. For example:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/arqade_pkg.sv tb/surface_ref_pkg.sv tb/tb_arqade_predecoder.sv \
  --top-module tb_arqade_predecoder
./obj_dir/Vtb_arqade_predecoder
```

| testbench | what it shows |
|---|---|
| `tb_arqade_pkg` | For d = 3, 5, 7, 9 and 15, checks the generated table against a brute-force geometry: <ul><li>every single fault is covered exactly once, with the right observable;</li><li>no stray primitives;</li><li>no conflicts within a stage;</li><li>subsets come after their supersets.</li></ul> |
| `tb_predecoding_primitive` | All 256 inputs for three primitives of sizes 1, 2 and 3 |
| `tb_syndrome_buffer` | Reset, and a one-clock transfer of every field |
| `tb_predecode_stage` | All six stages of the d = 5 table, each against a sequential model of that stage |
| `tb_complexity_detector` | Correction or deferral, and zeroing of the unused outputs |
| `tb_arqade_predecoder` | End to end at d = 5, comparing the full pipeline with a copy whose last stage is removed. The stimulus is every single fault, then 3000 random blocks of 1-4 faults. It checks every result and the latency (7 and 6 clocks), and it requires every stage to fire, deferrals, stage-removal deferrals and back-to-back blocks. |
| `tb_arqade_full` | The same at the default size (d = 15, 224-bit blocks, 6 stages), with every single fault and 10000 random blocks of 1-6 faults |
| `tb_stage_removal_sweep` | At d = 15, pipelines of 3, 4, 5 and 6 stages on the same blocks with independent phenomenological noise (p = 0.001, 0.003, 0.01). It checks every result against the reference, checks that a shorter pipeline never changes a correction, and prints the coverage for each depth. |

The reference model is in `tb/surface_ref_pkg.sv`. It finds checks by
searching plaquettes, not by the index formula of `arqade_pkg`. It applies
the stages one after another, one primitive at a time.

## Files

* `rtl/arqade_pkg.sv`: types, and the surface-code primitive table
* `rtl/predecoding_primitive.sv`: one primitive
* `rtl/predecode_stage.sv`: one pipeline stage
* `rtl/syndrome_buffer.sv`: the stage register
* `rtl/complexity_detector.sv`: the choice between correction and deferral
* `rtl/arqade_predecoder.sv`: the top
* `tb/`: the testbenches above and the reference package
