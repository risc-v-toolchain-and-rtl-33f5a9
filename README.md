# An SNN function unit for an in-order RISC-V core

This is the spiking-neural-network (SNN) extension of a small neuromorphic
processor, Wenquxing 22A, in SystemVerilog. Most neuromorphic processors put
a separate SNN accelerator beside a CPU and spend energy on the control traffic
between the two. Here the SNN arithmetic instead runs *inside* the pipeline of
an ordinary 64-bit in-order RISC-V core (NutShell). It is one more function unit
in the execution stage, driven by custom instructions. A program keeps the
neuron state and the synaptic weights in ordinary registers and memory. Every
SNN instruction does a small fixed piece of work in one cycle, so no
instruction holds up the pipeline for long.

Three ideas make the unit cheap:

* **Binary synapses.** A weight is one bit, so one 64-bit register holds the
  weights of 64 synapses. An input spike reaches the neuron only if the input
  spiked and its synapse is on: an AND, then a population count.
* **A streamlined leaky integrate-and-fire (LIF) neuron.** The potential loses
  a fixed leak per update, gains the spike count, and fires and resets when it
  reaches a threshold.
* **Binary stochastic STDP in one cycle.** When the neuron fires, each synapse
  whose input spiked is switched on (LTP, long-term potentiation). Each silent
  synapse is switched off with a programmable probability (LTD, long-term
  depression). The probability test compares a 10-bit number from a 16-bit
  LFSR with the LTD probability and depresses when `x <= P`.

The rest of the core is not included: fetch, decode, the integer register
file, the other execution units, memory and writeback. The top module
`wq22a_snn_top` is the SNN part seen from the pipeline. It receives a decoded
SNN operation with its two register operands and returns a 64-bit value for the
destination register.

## Block structure

```
            in_req (op, sreg, src1, src2)
                 |
   +-------------v--------------+        +-------------------------+
   | snn_isu_scoreboard         |<-------| busy bits of the special|
   | (SNN part of issue: stall  |        | registers               |
   |  on special-register RAW)  |        +-------------------------+
   +-------------+--------------+
                 | issue
   +-------------v------------------------------------------------+
   | snn_unit (SNNU, execution stage)                              |
   |   spike_process_unit (SPU)  neuron_unit (NU)  synapse_unit (SU)|
   |                                               ltp_unit        |
   |                                               ltd_unit        |
   |                                                 64 x lfsr16   |
   |   result register, valid/ready                                |
   +-------------+------------------------------------------------+
                 | writeback: out_data -> integer register file (outside)
                 |            special-register write ------------+
   +-------------v--------------+                                |
   | snn_sreg_file              |<-------------------------------+
   | VTH VLEAK PLTD SEED POST   |---> values read at issue
   +----------------------------+
```

`snn_pkg` holds the sizes, the operation and register encodings and the
request/response structs that all modules share.

## The operation set

The published description names the SNN instructions but gives neither their
encodings nor their operands. The operations below are this design's own
choice. Each one does exactly one of the three workflow stages (SPU, NU, SU)
or moves a special register:

| op    | operands                                        | result (`out_data`)                       | special-register effect |
|-------|-------------------------------------------------|-------------------------------------------|-------------------------|
| `SPK` | src1 = 64 input spikes, src2 = 64 weights        | popcount(src1 & src2), 0..64              | none |
| `NEU` | src1[15:0] = potential, src2 = spike count       | bit 63 = spike, bits 15:0 = new potential | POST <= spike |
| `SYN` | src1 = 64 weights, src2 = 64 input spikes        | updated weights                            | reads POST, PLTD; advances the LFSRs |
| `SRW` | src1 = value, `sreg` = register                  | 0                                          | sreg <= src1 |
| `SRR` | `sreg` = register                                | sreg, zero-extended                        | none |

A `NEU` spike count wider than 16 bits saturates to 65535.

A neuron with 784 inputs (a 28x28 image) uses 13 weight words: 12 full words
and one with 16 valid bits. One time step of one neuron is

```
cnt = 0
for k in 0..12:  cnt += SPK(in[k], w[k])      # software adds the counts
v   = NEU(v, cnt)                             # LIF update, POST <= spike
(training)  SRW POST, teacher                 # only if it differs from the spike
(if POST)   for k in 0..12:  w[k] = SYN(w[k], in[k])
```

For supervised learning the teacher signal is a write of POST: 1 for the
neuron of the true class, 0 for the others. The following `SYN` operations then
learn as if that neuron had fired, or had not.

## Special registers and the hazard rule

| register | width | reset  | meaning |
|----------|-------|--------|---------|
| `VTH`    | 16    | 16     | firing threshold |
| `VLEAK`  | 16    | 1      | leak subtracted per update |
| `PLTD`   | 10    | 0      | LTD probability P. A silent synapse is depressed when `x <= P`, i.e. with probability (P+1)/1024 |
| `SEED`   | 16    | 0xACE1 | LFSR seed. Writing it reloads all LFSRs at the same clock edge |
| `POST`   | 1     | 0      | spike of the last `NEU`, or the teacher value |

Special registers are written at **writeback**, when the result leaves the
unit. They are read at **issue**, when an operation enters it. A `NEU`
followed at once by a `SYN` is the common case: the `SYN` needs the POST that
the `NEU` has not yet written. `snn_isu_scoreboard` keeps one busy bit per
special register. The bit is set when an operation that writes the register
issues, and cleared when that operation writes back. An operation that reads
or writes a busy register is held at issue. There is no bypass, so the hold
also covers the writeback cycle itself. In practice a dependent operation issues
one cycle later than it otherwise would. `SYN` also lists SEED among its
reads, so a reseed always takes effect before the next weight update.

## Datapath details

**SPU** (`spike_process_unit`): 64 ANDs and an adder tree. It is combinational.

**NU** (`neuron_unit`), all values unsigned 16-bit:

```
v_leak = max(v_prev - leak, 0)
v_int  = min(v_leak + count, 65535)
spike  = v_int >= vth
v_next = spike ? 0 : v_int
```

The paper names the three inputs (spike count, previous state, leak). The
order of the steps, the floor at zero, the saturation and the reset to zero
are this design's choices.

**SU** (`synapse_unit` = `ltp_unit` + `ltd_unit`), with `post` from POST:

```
LTP: w_ltp = w | (pre & post)
LTD: depress[i] = post & ~pre[i] & (x_i <= PLTD);  w_ltd = w & ~depress
w_next = (w_ltp & pre) | (w_ltd & ~pre)
```

Without a neuron spike the weights are unchanged. The paper does not say which
synapses are LTD candidates; here they are the silent ones, as in the usual
binary stochastic STDP rule. It requires a single-cycle weight update, so every
one of the 64 lanes has its own 16-bit LFSR (`lfsr16`, taps 16,14,13,11,
maximal period 65535). `x_i` is the low 10 bits of lane i. Lane i starts
from `seed ^ key(i)` with `key(i) = (i * 40503) mod 65536`, and a zero start
value is replaced by 1. Every LFSR advances once per executed `SYN`. An LFSR
is linear, so the lanes are related sequences rather than independent ones.
For a binary depression decision that is acceptable, but it is a weakness
of this choice.

## Timing and handshake

* `in_valid`/`in_ready`: an operation is taken on a cycle where both are
  high. `in_ready` is low while the result register is full and not being
  drained, or while the scoreboard reports a hazard. Once offered, an
  operation must stay unchanged until it is taken (checked by an assertion).
* `out_valid`/`out_ready`: the result appears the cycle after the operation
  was taken. It is held unchanged while `out_ready` is low (assertion in
  `snn_unit`). Special-register writes happen in the cycle it is taken.
* Throughput: one operation per cycle when `out_ready` stays high and there is
  no special-register dependence. Latency: one cycle.
* Reset is asynchronous and active low (`rst_n`).

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `XLEN`    | 64      | the base core is RV64; one operation covers one register |
| `PW`      | 10      | width of the LTD random number and probability (paper) |
| `LFSR_W`  | 16      | LFSR width (paper). `lfsr16` itself is fixed at 16 bits |
| `NW`      | 16      | potential / threshold / leak width (own choice; 784 inputs need at least 10 bits) |

All modules default to these values. The main configuration was neither scaled
down nor changed.

## How far it follows the paper

Taken from the paper:

* an SNN unit in the execution stage, made of a spike process unit, a neuron
  unit and a synapse unit with separate LTP and LTD parts;
* AND plus spike counting in the SPU;
* a neuron update from spike count, previous state and leak;
* binary weights;
* a 10-bit random number from a 16-bit LFSR, with depression when `x <= P`;
* single-cycle weight updates;
* a special register file beside the integer registers, written from
  writeback;
* an issue stage that avoids hazards on it.

This design's own choices:

* the operation set and the operand layout;
* the 64-synapse granularity;
* the special-register map and its reset values;
* the potential width and the LIF details;
* the LTD candidate rule;
* one LFSR per lane, its polynomial and its seeding;
* the valid/ready handshake and the stall-only hazard rule.

Not provided:

* the rest of the RISC-V core;
* an instruction decoder, since the encodings are unpublished;
* the input pre-processing and Poisson encoding, which run as software on the
  core.

The paper tunes the LTD probability through a meta-parameter `w_exp`
(128, 256, 512) without giving the mapping. Here, software writes PLTD
directly.

## Network sizes

The evaluated networks have one layer of 10, 20 or 40 LIF neurons on
784 inputs. A comparison network uses 256 inputs (16x16). All of them fit,
because the unit has no neuron or synapse limit of its own. Weights live in
the core's memory: 13 words per neuron at 784 inputs, or 4,160 bytes for the
784-40 network. A neuron receives at most 784 spikes per step, far below the
16-bit potential range. The cost per neuron and time step is 13 `SPK` and one
`NEU`, plus 13 `SYN` when it learns.

## Verification

Each module has a self-checking testbench in `tb/`. The expected values come
from a separate reference model, `tb/snn_model_pkg.sv`. It keeps its own copy
of all 64 LFSR lanes, so every weight bit is predicted exactly.

* `tb_lfsr16`: load, zero seed, steps, and the full 65535-state period.
* `tb_spike_process_unit`, `tb_neuron_unit`, `tb_ltp_unit`: directed corner
  cases (leak floor, saturation, a potential exactly at threshold) and random
  vectors.
* `tb_ltd_unit`, `tb_synapse_unit`: bit-exact comparison with the model and
  reseeding. `tb_ltd_unit` also measures the depression rate at P = 255,
  which should be 25 %.
* `tb_snn_sreg_file`, `tb_snn_isu_scoreboard`: register behaviour and busy
  bits, including the writeback cycle.
* `tb_snn_unit`: a random operation mix with random back-pressure. It also
  checks the one-cycle latency and one operation per cycle.
* `tb_wq22a_snn_top`: end to end at the default sizes. A 784-10 classifier is
  configured, trained with the teacher on rate-encoded synthetic digits, and
  tested. Operations are issued back to back with random bubbles and
  back-pressure, and every result is checked. The test also counts each
  mechanism: hazard stalls, back-pressure, spikes, the leak floor,
  saturation, LTP, LTD, teacher writes, reseeds and register reads. It fails
  if any of them never happens. About 84,000 operations run in under a second.
* `tb_snn_workloads`: the 256-10, 784-10, 784-20 and 784-40 networks. The
  larger two use the paper's active-learning scheme: samples that the first
  ten neurons misclassify train the extra neurons. The workloads use
  synthetic images, because there is no dataset. The reported accuracies
  therefore say nothing about the MNIST accuracies in the paper; the test
  only requires better than chance.

Running a testbench with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/snn_pkg.sv tb/snn_model_pkg.sv tb/snn_net_pkg.sv \
    tb/tb_wq22a_snn_top.sv --top-module tb_wq22a_snn_top
./obj_dir/Vtb_wq22a_snn_top
```

Each testbench prints `TB_RESULT checks=N failures=M`. The unit testbenches
need only `rtl/snn_pkg.sv` and, where they import it, `tb/snn_model_pkg.sv`.
To change the operation set, edit `snn_op_e`, `op_reads`/`op_writes` in
`snn_pkg`, the case statement in `snn_unit`, and the model in `tb/`.
