# OzMAC: a zero-skipping shift-and-add multiply-accumulate unit

Quantised neural-network weights are mostly zero bits. In the INT8 weights of
common vision networks, about 70% of all weight bits are `0`, so an 8-bit weight
holds only about 2.3 ones on average. A conventional MAC has a full array
multiplier that spends the same hardware and switching activity on every bit.
OzMAC ("omit-zero" MAC) uses the identity

    w * a = sum over the set bits i of w  of  (a << i)

and computes one term per clock cycle. Its datapath is only a shifter, an adder
and a register. The '0' bits of the weight are skipped entirely, so a MAC costs
as many cycles as the weight has ones, not as many as it has bits. The unit has
far less logic than a parallel multiplier and toggles much less per cycle. It
trades a few cycles of latency (about 2.4 on average for INT8 weights) for
lower area, power and energy per MAC. When throughput matters, the clock is
raised instead.

The idea follows the "pragmatic" bit-serial inner-product unit of earlier
work. The OzMAC variant hands the shift amount to the shifter as a one-hot code
instead of a binary number. That costs more wires between the two blocks but
removes the shift decoder and the barrel stages.

This repository gives synthesizable SystemVerilog for the OzMAC, with
self-checking testbenches for each block and for the whole unit. The tests
include synthetic runs that reproduce the weight bit-sparsity of eight INT8
networks.

## Datapath

```
 in_weight ──► oz_encoder ──one-hot──► oz_shifter ──shifted──► (+) ──► Reg ──► acc_out
                                          ▲                     ▲       │
 in_act ──► act_q (held for the MAC) ─────┘                     └───────┘
```

| block            | file                   | what it does                                               |
|------------------|------------------------|------------------------------------------------------------|
| `oz_encoder`     | `rtl/oz_encoder.sv`    | FSM; issues one one-hot code per '1' bit of the weight, MSB first |
| `oz_shifter`     | `rtl/oz_shifter.sv`    | shifts the activation left by the hot position (AND-OR, no decoder) |
| `oz_accumulator` | `rtl/oz_accumulator.sv`| adder plus accumulator register, with a clear for new dot products |
| `ozmac`          | `rtl/ozmac.sv`         | top: the three blocks plus the activation holding register and handshake |
| `oz_pkg`         | `rtl/oz_pkg.sv`        | default widths and the encoder state type                    |

Worked example, 4-bit weight `0101` times 4-bit activation `1111` (5 x 15 = 75).
The example is replayed bit-exactly by the tests:

| cycle | encoder code | shifter output | register after the cycle |
|-------|--------------|----------------|--------------------------|
| 1     | `0100`       | `00111100`     | `00111100`               |
| 2     | `0001`       | `00001111`     | `01001011` (= 75)        |

The two zero bits of the weight cost nothing.

## The Oz-encoder: how the zero bits are skipped

This is the only part with state and timing subtleties. The encoder is a
two-state FSM (`OZ_IDLE`, `OZ_BUSY`) with a register `rem_q` that holds the
weight bits still to be issued.

* The code issued in a cycle is the leading one of a source word. The source
  word is the incoming weight in `OZ_IDLE`, or `rem_q` in `OZ_BUSY`. A priority
  scan from the MSB isolates that leading one. The code is then cleared from
  the source word, leaving `rest`.
* If `rest` is non-zero, the FSM goes (or stays) `OZ_BUSY` with
  `rem_q <= rest`. Otherwise it returns to `OZ_IDLE`.
* `w_ready` is simply "state is `OZ_IDLE`".

The first code comes combinationally from the incoming weight in the very
cycle the weight is accepted. So a weight with k > 0 ones occupies the unit for
exactly k cycles, and the next weight is accepted in the cycle right after the
last code. Back-to-back weights have no bubble and no load cycle:

```
weight A = 0101 0000 (k=2), weight B = 0000 0001 (k=1), weight C = 1000 0001 (k=2)

cycle        1         2         3         4         5
state        IDLE      BUSY      IDLE      IDLE      BUSY
accepted     A         -         B         C         -
code         01000000  00010000  00000001  10000000  00000001
op_done      0         1         1         0         1
out_valid    0         0         1         1         0    (then 1 in cycle 6)
```

A zero weight has no '1' to issue. It is accepted and retired in one cycle,
with no code (`oh_valid` low) and `op_done` high. This is the one place where
the cycle count differs from "number of ones". A port that takes one operand
pair per cycle cannot spend zero cycles on an operand. With INT8-like sparsity
(per-bit probability of a one about 0.3), about 6% of weights are zero, and this
adds about 0.05 cycles per MAC. An upstream stage that drops zero weights
(weight sparsity, as opposed to bit sparsity) would remove that cost.

Two assertions in the encoder check that the code has at most one bit set and
that `OZ_BUSY` never holds an empty remainder.

## The one-hot shifter

Output bit j is the OR over all positions i of `oh[i] & act[j-i]`. That is one
level of AND-OR selection per output bit, and it needs no decoder. With a
binary shift amount, the shifter would need a log2(WGT_W)-stage barrel shifter
or a decoder in front. The output is WGT_W+ACT_W bits wide, so
`act << (WGT_W-1)` never loses bits. An all-zero code gives zero.

## Accumulator and dot products

The adder adds the shifted activation to the register. `in_clear`, given with
the first operand pair of a dot product, makes the register start again from
zero: the first term is loaded instead of added. A dot product that starts
with a zero weight still clears the register.

The register is WGT_W+ACT_W bits (16 for 8x8), as wide as one full product.
This matches the 8-bit register of the 4x4 worked example. A sum of several
products therefore wraps modulo 2^ACC_W. For long dot products, raise `ACC_W`.
The `ozmac` top accepts any `ACC_W >= WGT_W+ACT_W`, and the tests check the
modular result.

Arithmetic is unsigned. Signed INT8 operands need handling outside the unit,
for example a zero-point offset or sign-magnitude weights.

## Interface and timing of `ozmac`

| port        | dir | width | meaning |
|-------------|-----|-------|---------|
| `clk`       | in  | 1     | clock, all state on the rising edge |
| `rst_n`     | in  | 1     | synchronous, active-low reset; clears FSM, registers, `out_valid` |
| `in_valid`  | in  | 1     | an operand pair is offered |
| `in_ready`  | out | 1     | the pair is taken this cycle (`in_valid && in_ready`) |
| `in_weight` | in  | WGT_W | weight; this operand is serialised |
| `in_act`    | in  | ACT_W | activation; this operand is shifted |
| `in_clear`  | in  | 1     | this operation starts a new dot product |
| `acc_out`   | out | ACC_W | accumulator register |
| `out_valid` | out | 1     | one-cycle pulse: the last accepted operation is now in `acc_out` |
| `busy`      | out | 1     | the encoder is still working through a weight (`!in_ready`) |

An operation accepted in cycle t, with a weight of k ones, performs its adds in
cycles t ... t+k-1. `out_valid` is high in cycle t+k, and `acc_out` then
includes it. A new operation can be accepted in that same cycle t+k. So the
unit sustains one MAC every max(1, k) cycles, and the result latency equals
that occupancy.

The activation is taken into `act_q` at acceptance. In the acceptance cycle
the shifter reads `in_act` directly, and in the later cycles it reads `act_q`.
The operand port is therefore free as soon as the pair has been taken.

## Parameters and sizes

| parameter | default | meaning |
|-----------|---------|---------|
| `WGT_W`   | 8       | weight bits; worst-case cycles per MAC |
| `ACT_W`   | 8       | activation bits; only widens the shifter and adder, adds no cycles |
| `ACC_W`   | WGT_W+ACT_W | accumulator bits |

The unit was evaluated at five precisions (weight x activation): 4x4, 4x8, 8x8,
8x16 and 16x16. All five are exercised here by parameter override. 8x8 is the
main configuration and the default.

Put the narrower operand on the weight side. Cycles scale with the weight's
ones and not with the activation width, so mixed precision such as 4x8 or
8x16 costs no more cycles than 4x4 or 8x8. At 16-bit weights the average
latency (about 4.6 cycles with network-like sparsity) erodes the energy
advantage over a parallel MAC.

## Expected cycle counts

Published average numbers of ones per INT8 weight, and what the synthetic test
measures. Each network gets 1000 weights, with bits drawn independently at that
density:

| network      | bit sparsity | ones / weight | cycles / MAC measured here (one seeded run) |
|--------------|--------------|---------------|----------------------------|
| MobileNetV2  | 70.83%       | 2.334         | 2.40 |
| MobileNetV3  | 78.61%       | 1.711         | 1.81 |
| InceptionV3  | 69.62%       | 2.430         | 2.49 |
| ShuffleNetV2 | 67.71%       | 2.583         | 2.68 |
| GoogleNet    | 69.24%       | 2.461         | 2.51 |
| ResNet18     | 70.02%       | 2.398         | 2.46 |
| ResNet50     | 68.81%       | 2.495         | 2.59 |
| ResNeXt101   | 71.39%       | 2.289         | 2.36 |

The measured figure is the ones per weight plus the roughly 0.05-cycle zero-weight
cost described above. At 500 MHz this means a MAC latency of 3.6-5.4 ns,
against 2 ns for a single-cycle parallel MAC.

Area, power and energy in a particular process come from synthesis and
gate-level power analysis, and the RTL alone does not determine them. The
reported 8-bit results in a 5 nm process are about 21% less area, 70% less
power and 28% less energy per MAC than a parallel MAC at the same clock. The
unit breaks even in energy at about 58% bit sparsity. Those numbers are not
reproduced here.

## Verification

| testbench                  | what it checks |
|----------------------------|----------------|
| `tb/tb_oz_encoder.sv`      | every 8-bit weight plus 2000 random ones with gaps: codes in MSB-first order, `oh_first`/`op_done`, exactly max(1,k) cycles, `w_ready` |
| `tb/tb_oz_shifter.sv`      | every one-hot code against every 8-bit activation, against `a * 2**i`; the worked example |
| `tb/tb_oz_accumulator.sv`  | 20000 random add/clear steps against a reference sum, wrap-around, worked example |
| `tb/tb_ozmac.sv`           | whole unit at default size, 20000 random operations with idle gaps, stalls and dot-product boundaries; result and completion cycle of every operation; counts that each mechanism occurred (zero bits skipped, multi-cycle ops, zero and all-ones weights, clear, back-to-back issue, idle input, held operands, wrap) |
| `tb/tb_ozmac_precisions.sv`| 4x4, 4x8, 8x8, 8x16, 16x16 instances (harness `tb/ozmac_prec_run.sv`): results, per-op cycle counts, worked example on 4x4 |
| `tb/tb_ozmac_benchmarks.sv`| default unit on eight synthetic network weight streams: dot-product result, total cycles = sum of max(1,k), sparsity matches the published figure |

Every testbench prints `TB_RESULT checks=N failures=M` and has a cycle watchdog.
To run one with Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb +libext+.sv \
    rtl/oz_pkg.sv tb/tb_ozmac.sv --top-module tb_ozmac -o sim
obj_dir/sim
```

Expected references are computed independently, with the `*` operator and
`$countones`. Each block's testbench was also run against a copy of the block
with one deliberate bug: an LSB-first scan, a wrong shift amount, an ignored
clear, and a stale activation on the first cycle. Each bug was caught.

## Where this RTL goes beyond or departs from the published description

The published description gives the three blocks, their connections, the
one-hot link, the MSB-first order (through the example) and the cycles-per-one
behaviour. Everything else here is an implementation choice:

* the valid/ready handshake, `in_clear`, `out_valid`, `busy` and the
  synchronous active-low reset;
* the register-of-remaining-bits form of the encoder FSM, and the combinational
  first code, which gives k cycles per weight with no load cycle;
* a zero weight costs one cycle, not zero;
* the activation holding register;
* unsigned operands, and an accumulator that is one product wide and wraps
  (this width is taken from the worked example);
* the AND-OR form of the shifter.

The parallel "binary" MAC that the design is compared against is not part of
the design and is not included. Clock frequency (0.5 to 1.5 GHz in the
evaluation) is a matter of the implementation flow, not of the RTL.
