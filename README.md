# A family of 32-bit synchronous adders

Adding two 32-bit numbers is mostly a question of how fast the carry gets from bit 0 to bit 31.
This RTL holds eight ways of moving that carry, all for the same 32-bit add with carry input and
carry output, so they can be simulated, synthesized and timed next to each other:

| `arch_e` index | Architecture | How the carry travels |
|---|---|---|
| `ARCH_RCA` | ripple carry adder, 32 full adders | one full adder per bit |
| `ARCH_RCA_DBFA` | ripple carry adder, 16 dual-bit full adders | one lookahead AND-OR per two bits |
| `ARCH_RCLA` | 8 x 4-bit recursive carry lookahead blocks | one AND-OR per 4-bit block; every carry inside a block formed in parallel |
| `ARCH_RCLA_RCA` | 2-bit RCA, 2-bit RCLA, 7 x 4-bit RCLA | short ripple at the bottom, then lookahead |
| `ARCH_BCLA` | 8 x 4-bit block carry lookahead blocks | one AND-OR per block; sums rippled inside the block |
| `ARCH_BCLA_RCA` | 2-bit RCA, 2-bit BCLA, 6 x 4-bit BCLA, 2-bit BCLA, 2-bit RCA | ripple at both ends, lookahead between |
| `ARCH_CSLA` | carry select, partitions 2,2,3,4,6,7,8 (LSB first), dual RCAs | one 2:1 multiplexer per partition |
| `ARCH_CSLA_BEC` | carry select, same partitions, RCA + binary-to-excess-1 converter | one 2:1 multiplexer per partition |

The top module, `adder_suite`, registers one operand pair, feeds it to all eight adders at once
and registers each adder's result. All eight must agree; they differ only in structure, and so in
delay, area and power once mapped to gates.

The architectures, their block sizes and the gate-level form of the carry generators follow a
published comparison of these adders in a 32/28 nm standard-cell process. That comparison also
reports, for a 32-bit add with minimum-size cells: the plain RCA of library full adders was the
smallest (about 155 um2) and the slowest (3.35 ns); the hybrid RCLA-RCA was the fastest (1.05 ns);
the carry select adders fell near 1.1 to 1.3 ns. Those figures belong to that process and its
cells. Nothing in this RTL reproduces them, because they depend on how a synthesis tool maps it.

## Building blocks

`full_adder` is sum = a xor b xor cin and carry = majority(a, b, cin). `rca` chains WIDTH of
them. `dbfa` adds two bits at a time. It forms p = a xor b and g = a and b per bit, makes the
upper sum bit from an internal carry, and makes its carry out directly as
g1 | p1 g0 | p1 p0 cin. So `rca_dbfa` moves the carry two bits per AND-OR level. How a dual-bit
full adder is built inside is this design's choice; only its function is fixed.

## Carry lookahead: recursive versus block generators

Both lookahead families start from the same per-bit signals, p = a xor b and g = a and b. They
also use the same identity: the carry into bit i of a block whose carry input is c0 is

    c[i] = G(i-1:0) | P(i-1:0) & c0
    G(i-1:0) = g[i-1] | p[i-1] g[i-2] | ... | p[i-1]...p[1] g[0]
    P(i-1:0) = p[i-1] & ... & p[0]

G and P depend only on the operands. In every block except the lowest, the operands settle long
before the carry arrives from below. G and P are then ready, and the late carry passes through a
single AND-OR gate (an AO21 cell) per block. That one gate per four bits is where the speed comes
from.

The two generators differ in how many of these carries they build:

* `rclg`, the recursive generator, builds all of them, c[1] through c[M], each with its own
  AND-OR on c0. `sub_rcla` then makes every sum bit as p[i] xor c[i]. It needs more gates, but
  every sum bit is only one XOR behind its carry.
* `bclg`, the block generator, builds only c[M], the block's carry out. `sub_bcla` makes its
  sum bits with a small ripple chain of its own: full adders at bits 0 to M-2 and a three-input
  XOR at bit M-1, all driven from the block's carry input. It needs fewer gates. The sums settle
  a few full-adder delays after the carry has already moved on to the next block.

`rcla` and `bcla` chain eight 4-bit blocks. The hybrids put short ripple adders where lookahead
buys nothing. At the bottom the carry input is available at time zero, so a 2-bit RCA hands its
carry to the first lookahead block at about the time that block's G and P are ready.
`bcla_rca` also ends in a 2-bit RCA at the top. Block sizes are parameters:
`RCA_W`, `FIRST_M` and `M` for `rcla_rca`; `LO_RCA_W`, `LO_M`, `M`, `HI_M` and `HI_RCA_W` for
`bcla_rca`.

## Carry select, with and without the BEC

A carry select adder computes each partition's result for both possible incoming carries before
the carry arrives. When it does arrive, a 2:1 multiplexer per bit picks one. The lowest partition
is a plain RCA fed by the carry input. Partition sizes grow towards the top
(2, 2, 3, 4, 6, 7, 8 bits from bit 0). The longer partitions therefore have more time to finish
while the carry works its way up through the multiplexers.

* `sub_csla` builds the two results with two RCAs, one with carry input 0 and one with 1.
* `sub_csla_bec` builds only the carry-0 result with an RCA. It derives the carry-1 result by
  adding one in a binary-to-excess-1 converter (BEC), the module `bec`. A W-bit partition needs a
  (W+1)-bit converter, because the RCA's carry out is incremented along with its sum bits. The
  converter inverts bit 0 and toggles each higher bit when all bits below it are 1, using a
  shared AND chain. This saves the second RCA's gates.

The partition is the unpacked array parameter `PART` (default `adder_pkg::CSLA_PART`). Its
`NPART` entries must sum to `WIDTH`.

## The registered suite

`adder_suite` has one parameter, `WIDTH`, default 32:

| Port | Width | Meaning |
|---|---|---|
| `clk`, `rst_n` | 1 | clock; synchronous active-low reset clearing every register |
| `a`, `b`, `cin` | 32, 32, 1 | operands, captured on every rising edge |
| `sum` | 8 x 32 (packed) | `sum[k]` is the registered sum of architecture `arch_e'(k)` |
| `cout` | 8 | `cout[k]` is its registered carry out |

Operands present at rising edge n appear at the outputs after edge n+1. That is a latency of two
cycles, with one new add per cycle. Each adder's combinational delay must fit in one clock
period. The published evaluation clocked the operands every 5 ns (200 MHz). The adder modules
themselves have no clock and can be used alone.

## Where this RTL departs from, or fills in, the published description

* The registers and reset around the adders are this design's choice. The adders were described
  only as combinational circuits.
* The carry select partition is given as "8-7-6-4-3-2-2". This design reads it most significant
  first, so bit 0 starts with a 2-bit RCA and the top partition is 8 bits. The block diagram of
  the carry select adder shows four 8-bit partitions instead; this design uses the listed
  partition.
* The block lookahead adder's sum chain is described in words as M-3 full adders and a
  three-input XOR. The diagram draws full adders up to bit M-2. M sum bits need M-1 full adders
  and one XOR, which is what `sub_bcla` has.
* The comparison also covers RCAs built from three other full adder circuits, and a second
  dual-bit full adder circuit. Their gates are not given, and their logic functions are the same
  as `full_adder` and `dbfa`. They are not separate modules here, so twelve compared adders map
  onto eight architectures.
* `full_adder` and `dbfa` are written as Boolean equations. The lookahead generators, carry
  select stages and BEC follow the published block and gate diagrams.
* Nothing here is tied to a cell library, and synthesis will restructure the logic. To keep the
  architectures distinct in a netlist, synthesize each module with its hierarchy preserved.

## Verification

Every module in `rtl/` has a self-checking testbench in `tb/`. Each one compares the module
against a reference the testbench computes with `+`, and prints `TB_RESULT checks=N failures=M`.

* Exhaustive tests cover `full_adder`, `dbfa`, `bec` (5 and 9 bits), `sub_csla`,
  `sub_csla_bec`, `sub_rcla` and `sub_bcla` (default width 4 and a second width). `rclg` and
  `bclg` are tested over all p, g and c0 against the bit-serial recurrence
  c[i+1] = g[i] | p[i] c[i].
* The eight 32-bit adders get carries generated at every bit and run to the top, propagate
  chains broken at every bit, all-ones and alternating patterns, and 3000 random pairs. All of
  these run with both carry inputs.
* `tb_adder_suite` runs the top at its default parameters. After reset it streams 100 directed
  and 1000 random operand pairs, one per 5 ns cycle, and checks all eight results at exactly two
  cycles of latency. It also counts how often each carry case occurred: every carry select
  partition seeing an incoming carry of 0 and of 1, a carry out of 1, a carry input of 1, and a
  carry propagating through all 32 bits. It fails if any of these never happened.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl \
        rtl/adder_pkg.sv tb/tb_adder_suite.sv --top-module tb_adder_suite
    ./obj_dir/Vtb_adder_suite

Replace `tb_adder_suite` with any other testbench name. The package `adder_pkg` must be read
first; Verilator finds every other module in `rtl/` by its name. Each testbench finishes in well
under a second.

## Files

`rtl/adder_pkg.sv` holds the shared width, the carry select partition and the `arch_e`
enumeration. Every other file in `rtl/` holds one module of the same name. Every file in `tb/`
holds the testbench `tb_<module>`.
