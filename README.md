# A heterogeneous accelerator for CKKS-style homomorphic encryption

Homomorphic-encryption workloads come in two kinds. *Deep* programs, such as
bootstrapping, deep neural networks and logistic-regression training, need
large rings (N = 2^16) and many RNS limbs. *Shallow* programs, such as small
encrypted inferences, are happy with N ≤ 2^14. A chip built only for deep
work wastes most of its NTT width on a shallow task. A chip built only for
shallow work cannot run deep tasks at all.

This design serves both kinds with two kinds of compute cluster:

* The **bootstrappable cluster** has a 256-point NTT pipeline and a
  basis-conversion (BConv) unit.
* The **swift cluster** has a 128-point NTT pipeline and no BConv unit.

One bootstrappable cluster and two swift clusters share an 8 MB L1 cache to
form a **cluster affiliation**. The chip has eight affiliations.

* A deep task uses all eight bootstrappable clusters together. Each
  256-coefficient column of a 2^16-point polynomial is handled by one cluster,
  and an L3 transpose exchanges data between them.
* A shallow task takes exactly one affiliation, so eight shallow tasks run at
  once. Inside the affiliation, the bootstrappable cluster's 256-point network
  is entered one stage late. It then behaves as two independent 128-point
  pipelines, so the affiliation offers four 128-point pipelines, joined by an
  L2 transpose.

This repository holds synthesizable SystemVerilog for the datapath, the
on-chip memories, the transposes, the data distribution and the instruction
controller, plus self-checking testbenches for each.

## Structure

```
flash_fhe_top
├── scheduler              two priority queues of driver instructions, mode, issue
├── engine_data_manager    off-chip memory <-> L2 rows
├── l2_cache               256 MB, 256-coefficient rows
├── l2_mover               L2 -> distributor (loads), L1 -> L2 (stores)
├── data_distributor       column -> (affiliation, L1 partition, row)
├── l3_transpose           2048 ports across the 8 bootstrappable clusters
└── cluster_affiliation ×8
    ├── bootstrappable_cluster   cluster_seq + ntt_pipeline(256) + bconv(60)
    ├── swift_cluster ×2         cluster_seq + ntt_pipeline(128)
    ├── l2_transpose             512 ports across the four 128-lane partitions
    └── l1_cache                 8 MB = 4 partitions × 4096 rows × 128 lanes
ntt_pipeline = ntt_network -> mod_calc -> l1_transpose (8 or 4 × l1_transpose_block)
```

All shared types live in `fhe_pkg`. A residue is a 32-bit word, and moduli must
be below 2^31. The clock domain is a single core clock. The SRAMs are modelled
as one read plus one write per cycle. This stands for a single-ported macro run
at twice the core clock.

## The NTT pipeline and its entrances

`ntt_network` is a fully pipelined Gentleman–Sande (decimation-in-frequency)
network with log2(P) stages and one register per stage.

* Stage s pairs lane j with lane j + P/2^(s+1).
* It multiplies the difference by `tw[(j mod P/2^(s+1)) << s]`, where
  `tw[k] = w^k` is a table of P/2 powers of a primitive P-th root.

Because the network is decimation-in-frequency, the stages from s onward form
2^s independent NTTs of P/2^s points over consecutive lane groups, and they use
exactly the same twiddles. So a configurable **entrance** (where data is
injected) and **exit** (where data is taken) turn one circuit into any
power-of-two number of smaller parallel NTTs.

* Outputs come out in bit-reversed order within each sub-NTT.
* The latency is exit − entrance + 1 cycles.
* An inverse NTT uses the same circuit with a table of inverse powers. Scaling
  by 1/N is an ordinary multiply in the next unit.

`mod_calc` follows the network. It can pass data through, add, subtract or
multiply by a broadcast constant, or multiply by **twisting factors**. For the
four-step NTT, lane r of vector c needs w_N^(r·c). The unit keeps one running
factor per lane and multiplies it by a per-lane step after each vector. It
therefore needs no table of N factors, only P step values, and `sync` resets
the factors to 1.

A **four-step NTT** of N = P × C points takes two passes through the pipeline.

1. Column NTTs, then the twist multiply, then a transpose of P×P tiles in the
   L1 transpose. The rows go back to the L1 cache.
2. The transposed rows are read back into the network for the second set of
   NTTs.

Every unit can be bypassed. The output selector returns the network's output,
the modular unit's output or the transpose's output. The pipeline testbench runs
a complete 1024-point four-step NTT, 32 × 32, in every 32-lane group, and
compares it with a direct DFT.

## The streaming transpose block

The hardest piece of the design is `l1_transpose_block`. It is a 32-port,
five-stage circuit that transposes a stream of D×D matrices, arriving one row
per cycle, for any D = 2…32. D is chosen by which stage's output is used (taps
E0…E4 give D = 2, 4, 8, 16 and 32).

Stage j, with b = 2^j, works on lane pairs (p, p+b), where p has bit j clear:

1. The lane p+b is delayed by b cycles **before** the stage.
2. When bit j of the row counter is 1 (counter delayed to this stage), the
   pair is swapped.
3. The lane p is delayed by b cycles **after** the swap, and a register
   follows.

After stage j, every 2^(j+1) × 2^(j+1) diagonal block of the stream has been
transposed. Taking the output after stage log2(D) − 1 therefore transposes
every D×D matrix.

* The pre-swap delays of lane i add up to i cycles: the classic "delay input i
  by i" skew.
* The post-swap delays realign the rows.
* A matrix must start at a cycle where the row counter is a multiple of D. The
  counter is free-running and is cleared by `sync`.
* The latency for tap e is 2^(e+1) − 1 + (e+1) cycles.

The testbench checks every D with random gaps between matrices.

The bootstrappable cluster puts eight blocks side by side and the swift cluster
four. All blocks share one counter setting.

## Three levels of transpose and the data distributor

* **L1**: inside each pipeline, as above.
* **L2**: inside an affiliation. The four 128-lane partitions form 512 ports,
  and port i of partition j is wired to port 4i + j. It is used by shallow
  tasks, which spread a polynomial over the four 128-point pipelines of one
  affiliation.
* **L3**: across the eight bootstrappable clusters. There are 2048 ports, and
  port i of cluster j is wired to port 8i + j. It is used by deep tasks.

Both L2 and L3 are fixed wiring plus one register stage. Output port p lands in
partition (or cluster) p / lanes, lane p mod lanes, at the same row that the
producing pass writes. So every cluster on the transpose must run the same
command in lock step. The controller guarantees this by giving one command to
all of them.

The **data distributor** places the columns read from L2:

* In shallow mode, column i goes to partition i mod 4 of the task's
  affiliation, at row base + i/4.
* In deep mode, column i goes to the bootstrappable cluster of affiliation
  i mod 8, at row base + i/8.

## BConv

`bconv` computes Σ x_i·k_i mod q over l_sub = 60 residues in a single pass. It
uses 60 modular multipliers, a six-level tree of modular adders, and a last
adder that can add a partial sum taken from the L1 cache. It is fully
pipelined, with one conversion per cycle and a latency of eight cycles. The
cluster feeds it lanes 0…59 of each L1 row. It packs 256 results per output row,
and the partial sums come from a register loaded from an L1 row.

## Clusters and their commands

Both cluster types contain the same sequencer, `cluster_seq`. A command
(`ccmd_t`) names a source row, a destination row and a row count in the
cluster's L1 partitions. The sequencer streams one row per cycle into the
datapath and writes the result rows back. There are three kinds of command:

* `CK_PASS`: rows go through the NTT pipeline. The command carries the
  entrance, exit, modular operation, transpose tap, bypass bits and output
  selection, and the results can be routed locally, through L2 or through L3.
* `CK_BCONV`: rows go through BConv, with or without the final addition of a
  partial sum.
* `CK_LOAD`: one row is loaded into a configuration register. The registers are
  the twiddle table, the twist steps, the BConv constants and the partial sums.

Stage numbers in a command always refer to the 256-point network. The swift
cluster's 128-point network counts as its last seven stages. So one command with
entrance 1 and exit 7 runs 128-point NTTs on all three clusters of an
affiliation at once, which is what the L2 transpose needs. A BConv command on a
swift cluster yields a zero row.

Timing of a pass: the first result is written 2 + (exit − entrance + 1) + 1
cycles after the command is taken, and then one row per cycle. `busy` stays up
two cycles after the last write.

## Controller

A software driver turns a task into instructions (`instr_t`). The `scheduler`
executes them from two in-order queues, high and low priority. Whenever the
high queue holds anything, its head is considered first. So a high-priority
task overtakes a waiting low-priority one at the next instruction boundary.
The instructions that spill and reload the displaced task's data are the
driver's job.

An instruction issues as soon as every unit it names is idle. An affiliation
also counts as busy while the L2 mover is moving its rows. The instructions
are:

* `OP_TASK`: declares log N. Log N > 14 puts the queue in deep mode, otherwise
  shallow mode.
* `OP_CLUSTER`: a command to selected clusters of selected affiliations.
* `OP_L2LOAD` / `OP_L2STORE`: moves rows between L2 and L1.
* `OP_HBMLOAD` / `OP_HBMSTORE`: moves rows between off-chip memory and L2.
* `OP_FENCE`: waits until every unit is idle.

Counters report deep tasks, shallow tasks, preemptions and mode switches.

## Top-level ports

* The instruction stream, with valid/ready and a priority bit.
* A request/response channel to the off-chip memory controller. Each row is
  256 coefficients. Reads are answered in order, and requests are held until
  accepted.
* Status: idle, the mode of each queue and the counters.

The PCIe interface, the memory controller, the HBM stacks and their PHYs are
outside the design. The parameter `NA` (default 8) sets the number of
affiliations. `L1_ROWS` and `L2_ROWS` set the memory depths (defaults 4096 rows
per L1 partition and 262144 L2 rows, that is 8 MB and 256 MB).

## What follows the source architecture and what is this design's own

These follow the architecture as published:

* the cluster sizes (256 and 128 points);
* l_sub = 60 and the structure of the BConv unit;
* eight affiliations of one bootstrappable and two swift clusters;
* 8 MB of L1 per affiliation and 320 MB of SRAM in total;
* the building-block transpose (32 ports, five stages, per-stage multiplexers
  driven by counter bits, taps E0–E4);
* the L2 and L3 port wiring and the distributor rule;
* deep/shallow mode from N, one shallow task per affiliation, and
  priority-based preemption.

These are this design's own choices:

* the 32-bit word and the plain remainder-based modular multiplier;
* the register placement and latencies;
* where the twiddle multiply sits in the butterfly;
* the per-stage split of the transpose delays;
* the instruction and command formats, the configuration registers, the
  lock-step rule for the L2 and L3 routes, and the port priorities of the
  L1 cache;
* the L2 mover;
* the reading that L2 holds the 256 MB that is left after the eight L1 caches.

## Not included

* Key generation and the automorphism (rotation) unit are only named by the
  architecture, without enough detail to build them.
* The off-chip memory, its controller and the host interface are bought parts.

There is therefore no datapath here for rotations or on-chip key generation.

## Simulating

Every testbench in `tb/` is self-checking. It prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. To run one with
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/fhe_pkg.sv tb/tb_ntt_pipeline.sv --top-module tb_ntt_pipeline
./obj_dir/Vtb_ntt_pipeline +verilator+rand+reset+2
```

* `tb/hbm_model.sv` is a behavioural off-chip memory with random back-pressure.
* `tb_flash_fhe_top` runs a whole program end to end with two affiliations and
  reduced memory depths. The program is a deep task (HBM → L2 → eight-way
  distribution → NTT through L3, bypass pass, BConv → L2 → HBM) preempted by a
  shallow task that runs on two affiliations at once through L2. Every result
  row is compared with a direct computation, and each mechanism must occur at
  least once. It builds in about three minutes.
* With all eight affiliations the Verilator C++ build is too large to finish
  in reasonable time. The largest configuration simulated is two affiliations
  for the whole chip, and one full-size affiliation (with a smaller L1 depth)
  in `tb_cluster_affiliation`. The full eight-affiliation top passes lint and
  elaboration.
