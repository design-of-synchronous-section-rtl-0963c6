# Hybrid section-carry based carry lookahead adder, 32 bits

A carry lookahead adder (CLA) avoids the linear carry ripple of a ripple
carry adder (RCA) by computing carries directly from the generate and
propagate signals of the operand bits. A *conventional* CLA section computes
a lookahead carry for every bit it covers. A *section-carry based* CLA
(SCBCLA) computes only one: the carry out of the section, which goes to the
next section. Inside the section, the sums are formed the cheap way, by
letting the section's carry input ripple through full adders. The carry
chain across the word therefore still runs at lookahead speed, while most of
the per-bit lookahead logic is gone.

This RTL implements the 32-bit *Hybrid SCBCLA_4* topology from P.
Balasubramanian, "Design of Synchronous Section-Carry Based Carry Lookahead
Adders with Improved Figure of Merit" (WSEAS Transactions on Circuits and
Systems). Among the homogeneous and hybrid CLAs compared there, this one has
the best figure of merit (the inverse of the power-delay-area product) in
the reported 32/28 nm standard-cell implementation. "Synchronous" in that
title means "not self-timed": the adder itself is combinational logic that
sits between registers of a clocked design.

## The section chain

The word is cut into ten sections, least significant first:

| section | bits    | kind   | width |
|---------|---------|--------|-------|
| 0       | 1:0     | RCA    | 2     |
| 1       | 3:2     | SCBCLA | 2     |
| 2-7     | 27:4    | SCBCLA | 4 each|
| 8       | 29:28   | SCBCLA | 2     |
| 9       | 31:30   | RCA    | 2     |

The carry out of each section is the carry in of the next; `cin` enters
section 0 and `cout` leaves section 9. The two end sections are plain ripple
adders. At the low end a short RCA costs less than lookahead logic and its
carry is ready early anyway. At the high end only the last two sum bits and
`cout` wait for the ripple. The table lives in `scbcla_pkg::HYBRID4_SEGS`,
and `hybrid_scbcla4` places one `rca` or `scbcla` per entry with a
generate loop. Changing the table (and `NUM_SEGS`) gives the other
topologies of the same family, for example eight 4-bit SCBCLAs
(homogeneous), or a 4-bit RCA followed by seven 4-bit SCBCLAs. An
elaboration-time check stops the build if the widths do not add up to 32.
Only the Hybrid SCBCLA_4 table is provided and tested.

## One SCBCLA section

An m-bit section (`scbcla`) has three parts:

1. **Propagate-generate logic** (`pg_logic`): `G_i = A_i & B_i`,
   `P_i = A_i ^ B_i` for each bit.
2. **Section-carry lookahead generator** (`scb_clg`): the one carry
   `C_m` to the next section, from P, G and the section carry input `C_0`.
3. **Sum logic** (`scb_sum_logic`): full adders on bits 0 to m-2, fed from
   `A`, `B` and a carry rippled from `C_0`. Bit m-1 needs no carry out,
   because the generator supplies the section carry, so it is only a
   three-input XOR of `A_{m-1}`, `B_{m-1}` and the rippled carry.

The sum ripple and the lookahead generator both start from `C_0`, but they
are independent. A section's sums may settle after its carry out has already
reached the next section.

## The decomposed lookahead carry

This is the core of the design and the part that sets its speed. Written
out, the carry out of a 4-bit section is

    C4 = G3 + P3 G2 + P3 P2 G1 + P3 P2 P1 G0 + P3 P2 P1 P0 C0

A direct two-level realisation needs 5-input AND and OR gates. Libraries
with a fan-in limit of 4 do not offer those, and the carry input would pass
through both wide gates. The generator is instead split into a part that
does not depend on `C0` and a final gate that does:

    N  = G3 + P3 G2 + P3 P2 G1 + P3 P2 P1 G0     (AND2, AND3, AND4, then OR4)
    M  = P3 P2 P1 P0                             (AND4)
    C4 = M C0 + N                                (one AO21 complex gate)

`N` and `M` are ready as soon as the operands are, in parallel in every
section. So when the carry ripples from section to section, it passes a
single AO21 (`ao21`, `v = x&y | z`) per section. The longest path inside a
section is from an operand bit: XOR2 (for P), AND4, OR4, then the OR of the
AO21.

`scb_clg` writes this for any width m: `term[j] = G_j & P_{m-1} & ... &
P_{j+1}`, `N = |term`, `M = &P`. For m up to 4, each term fits a single
library gate. For wider sections the reductions exceed fan-in 4, and
splitting them is left to synthesis. The AO21 is a separate module, so the
intended final gate is visible in the netlist hierarchy. Whether synthesis
keeps it as one cell depends on the flow.

## Files

| file | content |
|------|---------|
| `rtl/scbcla_pkg.sv` | section kinds, section table, `seg_lsb()` |
| `rtl/ao21.sv` | AO21 gate |
| `rtl/pg_logic.sv` | propagate/generate per bit (`WIDTH`, default 4) |
| `rtl/scb_clg.sv` | decomposed section-carry lookahead generator (`WIDTH`, default 4) |
| `rtl/full_adder.sv` | one-bit full adder |
| `rtl/scb_sum_logic.sv` | rippled sum logic of an SCBCLA section (`WIDTH`, default 4) |
| `rtl/rca.sv` | ripple carry adder (`WIDTH`, default 2) |
| `rtl/scbcla.sv` | one SCBCLA section (`WIDTH`, default 4) |
| `rtl/hybrid_scbcla4.sv` | 32-bit top: `a`, `b`, `cin` in; `sum`, `cout` out |
| `tb/<module>_tb.sv` | one self-checking testbench per module |

## Interface and timing

    module hybrid_scbcla4 (
      input  logic [31:0] a, b,
      input  logic        cin,
      output logic [31:0] sum,
      output logic        cout);     // {cout, sum} = a + b + cin

The adder has no clock, reset or state, and its result is valid one
propagation delay after the inputs change. The reference implementation
reports a critical path of 1.12 ns, 41.63 uW average power at a 5 ns input
interval, and 461.02 um^2. These are standard-cell figures for a high-Vt
32/28 nm library with minimum-size cells. RTL simulation cannot reproduce
them, and this repository does not claim them. For a plain two-operand add,
tie `cin` to 0.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

- `ao21_tb` and `full_adder_tb` are exhaustive truth tables.
- `pg_logic_tb` runs all 4-bit operand pairs. It also checks that P and G
  are never both 1.
- `scb_clg_tb` runs all P/G/C0 combinations at widths 1 to 4. This includes
  the P=G=1 combination, which real operands never produce. It compares
  against the bitwise recursion `C_{i+1} = G_i + P_i C_i`.
- `scb_sum_logic_tb` and `scbcla_tb` are exhaustive at widths 2, 3 and 4,
  and `rca_tb` at widths 1, 2 and 4. They compare against integer addition.
  `scbcla_tb` also requires both carry sources to occur: a carry through the
  `M C0` path, and a carry generated inside the section.
- `hybrid_scbcla4_tb` runs the full 32-bit adder with its default
  parameters. It applies 4000 operand pairs, one every 5 ns: directed
  corners, uniform random pairs, and pairs biased toward long propagate
  chains. It checks `{cout, sum}` against 33-bit integer addition, and the
  carry at every section boundary against the carry computed from the
  operands. It also counts each carry mechanism and fails if any never
  happens:
  - a carry through the C0 path of a 2-bit and of a 4-bit SCBCLA;
  - a carry generated inside a 2-bit and inside a 4-bit SCBCLA;
  - a carry out of the low RCA;
  - `cout` set;
  - a carry through all 32 bits.

With Verilator 5, from the repository root:

    verilator --binary --timing --assert -Wall -Wno-fatal -Mdir obj \
        rtl/scbcla_pkg.sv rtl/*.sv tb/hybrid_scbcla4_tb.sv --top-module hybrid_scbcla4_tb
    ./obj/Vhybrid_scbcla4_tb

For another module, swap in its testbench and top-module name. The package
file is listed first so that it is compiled before the modules that import
it. Each run takes well under a second.

## Where this RTL departs from, or goes beyond, the source

- **Full adder gates.** The source gives the full adder only by its function.
  Here it is `s = P ^ ci`, `co = G | P&ci`.
- **Middle bits of the sum logic.** The source draws the sum logic with the
  bit-0 full adder, the top-bit XOR and dots in between. Here the middle bits
  are full adders.
- **Section widths above 4.** The generator is written for any width, but the
  source's fan-in limit of 4 is only met up to 4 bits. All sections of this
  adder are 2 or 4 bits wide.
- **No registers.** Operand and result registers, and their clocking, are
  not part of this RTL. The characterisation applied one new operand pair
  every 5 ns, and the top-level testbench does the same.
- **Names.** Port and signal names are this design's choice. Where the
  source labels a signal (P, G, C0, Cm, and the AO21's X, Y, Z, V), the RTL
  uses the same letters.
- **Not built.** The conventional CLA sections and adders the source uses as
  its baselines are not included. Neither are the other SCBCLA topologies,
  which the section table can express, as described above.
