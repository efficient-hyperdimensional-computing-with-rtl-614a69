# MCR-HDCU: a coprocessor for Modular Composite Representation hypervectors

Hyperdimensional computing stores and compares information as very long
vectors ("hypervectors"). In a Modular Composite Representation (MCR)
every component is an integer in the ring Z_r, with r a power of two. You can
read a component k as the phase angle 2πk/r of a unit phasor. This gives
r-level precision per component, but the arithmetic stays integer and cheap:

| operation | meaning on phases | what the hardware does |
|---|---|---|
| bind a ⊗ b | add phases | b-bit add, the wrap-around is free (b = log2 r) |
| unbind | subtract phases | b-bit subtract |
| permutation ρ | reorder components | read the lines of a vector in rotated order |
| distance δ(a,b) | sum of angular distances | Σ min((a−b) mod r, (b−a) mod r) |
| superposition (bundling) | sum of phasors | add cos/sin of each component to a fixed-point complex accumulator |
| normalization | snap each sum back to Z_r | pick the nearest of the r directions by a winner-take-all |
| search | nearest class prototype | a distance for each prototype, keep the minimum |

The only operations that leave integer arithmetic are superposition and
normalization. Both use one small table of cos/sin values and need no
division or arctangent.

This RTL implements the coprocessor. It holds vectors in local scratchpads
and runs each of these operations over a whole vector from one command,
SIMD components per clock. The default configuration is:

- r = 16, so b = 4 bits per component;
- SIMD = 8 components per cycle;
- FP = 16-bit fixed point for the accumulators;
- four 2 KB scratchpads.

The coprocessor is meant to sit beside a small RISC-V core. The core issues
decoded commands and moves vectors in and out of the scratchpads through its
load/store unit.

## Data formats

**Z_r line.** A Z_r scratchpad line is b·SIMD = 32 bits wide. Component `l`
of the line is in bits `[l*b +: b]`. A vector of HVDIM components takes
nl = HVDIM/SIMD consecutive lines. HVDIM must be a multiple of SIMD.

**Accumulator line.** A line of the superposition scratchpad is FP·SIMD = 128
bits wide. It holds SIMD/2 complex components:

- lanes 0 … SIMD/2−1 hold the real parts;
- lanes SIMD/2 … SIMD−1 hold the imaginary parts, in the same order;
- each lane is a signed FP-bit number.

So the accumulator of an HVDIM vector takes 2·nl lines. Line `2i` holds
components `i·SIMD … i·SIMD+SIMD/2−1` of Z_r line `i`, and line `2i+1` holds
the upper half.

**Cos/sin table.** The table holds

    cos_k = round(AMP·cos(2πk/r)),  sin_k = round(AMP·sin(2πk/r)),  k = 0 … r−1

as FP-bit two's-complement numbers. The values are computed while the design
is elaborated, by an integer Taylor series in `mcr_pkg::trig_q`, so there is
no table file.

The amplitude AMP defaults to `(2^(FP−1)−1) >> 10` = 31. This means 1024
unit phasors can be summed without overflowing an FP-bit lane. For r = 16
the cosines are 31, 29, 22, 12, 0, −12, … Coarse values are enough, because
the table only has to tell r directions apart in the winner-take-all below. A
larger AMP gives finer sums but fewer terms before overflow. It is a
parameter of the top, and overflow wraps.

## Organisation

```
            hdcu_req/hdcu_cmd ─►┌──────────── mcr_ctrl ────────────┐
            hdcu_busy ◄─────────│ FU controller, SPM access handler,│
                                │ mcr_hw_loop (rep × line × class)  │
                                └──┬───────────────┬────────────────┘
                     read/write    │               │ unit strobes
                     addresses     ▼               ▼
 lsu_* ◄──────►┌──── mcr_spmi ───────┐    ┌──── mcr_fu_map ───────────────┐
 (idle only)   │ 3 × mcr_spm (Z_r)   │───►│ input mapping (operand gating)│
               │ 1 × mcr_sup_spm     │    │  bind  sup  norm  perm  dist  │
               │     (accumulators)  │◄───│ intermediate: dist ► search   │
               └─────────────────────┘    │ output mapping (write-back)   │
                                          │ shared mcr_trig_lut           │
                                          └───────────────────────────────┘
```

`mcr_hdcu` is the top. The parts are:

- **Control unit (`mcr_ctrl`).** It takes a command when `hdcu_req` is high
  and `hdcu_busy` is low. It then steps a three-level hardware loop
  (`mcr_hw_loop`): repeat × line × class. Each step produces:
  - up to three scratchpad reads: operand A and operand B from Z_r
    scratchpads, and one accumulator line;
  - up to two writes: one to a Z_r scratchpad, one to the accumulator
    scratchpad;
  - the strobes of the active unit.

  The permutation unit (`mcr_perm_unit`) only computes read addresses, so it
  is driven from the controller.
- **SPMI (`mcr_spmi`).** It holds the scratchpads and routes the five
  access ports to them. Each Z_r scratchpad has two read ports and one write
  port, so both operands may come from the same scratchpad. The host LSU
  shares these ports and is granted only while the coprocessor is idle.
- **Mapping (`mcr_fu_map`).** Operands reach only the active unit; the others
  see zeros. The map also carries the distance result to the search logic
  and selects the result that is written back. The one cos/sin table is
  addressed by the superposition unit while that runs, and by normalization
  otherwise.
- **Functional units.** `mcr_bind_unit`, `mcr_sup_unit`, `mcr_norm_unit`,
  `mcr_dist_unit` and `mcr_search_unit`. The synthesis parameter `FU_EN`
  removes units you do not need (bit order: bind, sup, norm, perm, dist).
  Commands for a removed unit are accepted and do nothing.

## Commands

A command is the packed struct `cmd_t` (`mcr_pkg`): `{op, rd, rs1, rs2}`.
Each operand is `{spm[1:0], line[15:0]}`, meaning Z_r scratchpad 0 … N_ZR_SPM−1 and a
starting line. Operands that name an accumulator use only the line field.

| op | code | effect |
|---|---|---|
| `OP_NOP` | 0 | nothing |
| `OP_CFG` | 1 | HVDIM ← rs1.line, HVCLASS ← rs2.line. Does not raise busy. |
| `OP_BIND` | 2 | rd ← rs1 + rs2 (mod r), component-wise |
| `OP_UNBIND` | 3 | rd ← rs1 − rs2 (mod r) |
| `OP_SUP` | 4 | acc[rs2] ← acc[rs2] + (cos, sin)(rs1) |
| `OP_SUP_INIT` | 5 | acc[rs2] ← (cos, sin)(rs1). Starts a new bundle. |
| `OP_NORM` | 6 | rd ← winner-take-all(acc[rs1]) |
| `OP_PERM` | 7 | line i of rd ← line (i − rs2.line) mod nl of rs1 |
| `OP_DIST` | 8 | line rd ← δ(rs1, rs2), zero-extended; also on `result` |
| `OP_SEARCH` | 9 | line rd ← argmin_c δ(rs1, prototype c); also on `result` |

For a search, the HVCLASS prototypes lie back to back from rs2: prototype c
starts at line rs2.line + c·nl. When several prototypes have the same
distance, the lowest index wins.

A command held on `hdcu_req` while the unit is busy waits. It is taken in the
first cycle in which `hdcu_busy` is low.

## Timing

With nl = HVDIM/SIMD, K = r/4+1 and L = log2 SIMD, `hdcu_busy` stays high for
the number of cycles below, counted from the cycle after the command is
taken:

| command | busy cycles | minimum pipelined latency | extra cycles |
|---|---|---|---|
| BIND, UNBIND, PERM | nl + 1 | nl | SPM read |
| SUP, SUP_INIT | 2nl + 1 | 2nl | SPM read |
| NORM | 2nl·K + 2 | 2nl·K | SPM read, write-back |
| DIST | nl + L + 3 | nl + L | SPM read, Stage0 and ACC registers |
| SEARCH | HVCLASS·nl + L + 4 | – | as DIST, plus the compare |

The table takes one step per cycle, and the controller writes results back
while it is still reading.

For the defaults (SIMD = 8, r = 16) and HVDIM = 64, that is:

| command | busy cycles |
|---|---|
| bind | 9 |
| superposition | 17 |
| normalization | 82 |
| distance | 14 |
| 26-class search | 215 |

`tb_mcr_workloads` shows what this adds up to for a key–value encoding plus
classification with D = 64. The times are coprocessor busy cycles only, at a
150 MHz clock:

| data set shape (features d, classes c) | cycles | µs at 150 MHz |
|---|---|---|
| d=3, c=2 | 191 | 1.27 |
| d=16, c=26 | 747 | 4.98 |
| d=561, c=6 | 15 847 | 105.7 |
| d=617, c=26 | 17 575 | 117.2 |

The figures published for the original accelerator with these shapes are
2.2, 6.1, 117.7 and 130.4 µs, including the host core's own work. The
busy cycles are in line with those figures.

`tb_mcr_workloads_d1024` does the same with D = 1024. It is built with 4 KB
scratchpads, because a 1024-component accumulator needs 4 KB:

| data set shape (features d, classes c) | cycles | µs at 150 MHz | published µs |
|---|---|---|---|
| d=3, c=2 | 2 711 | 18.1 | 28.1 |
| d=14, c=2 | 6 979 | 46.5 | 56.8 |
| d=21, c=10 | 10 997 | 73.3 | 81.8 |
| d=561, c=6 | 219 727 | 1 464.9 | 1 486.0 |

For wide inputs the time is dominated by binding and superposition, at
3·nl + 4 cycles per feature. The remaining gap to the published times is
roughly constant per inference, which fits host-side overhead.

## Inside the units

### Superposition (`mcr_sup_unit`)

A Z_r line carries SIMD components, but an accumulator line has room for only
SIMD/2 complex values. So each Z_r line is held for two cycles:

- In the first cycle, its lower SIMD/2 components address the cos/sin table.
  The cosines are added to the real lanes of accumulator line 2i and the
  sines to its imaginary lanes.
- In the second cycle, the upper half is added to line 2i+1 in the same way.

The result is written back to the same accumulator line (read–modify–write,
one line per cycle). `OP_SUP_INIT` adds to zero instead of to the stored
line, so a bundle starts without a separate clear.

### Normalization (`mcr_norm_unit`), winner-take-all

Normalization maps each accumulated complex value v = (re, im) to the Z_r
value k whose direction (cos_k, sin_k) has the largest inner product
re·cos_k + im·sin_k. No division and no arctangent are needed. Only r/4+1
directions can win:

1. **Quadrant.** The sign bits of re and im select a closed quadrant:

   | signs | candidates k |
   |---|---|
   | re ≥ 0, im ≥ 0 | 0 … r/4 |
   | re < 0, im ≥ 0 | r/4 … r/2 |
   | re < 0, im < 0 | r/2 … 3r/4 |
   | re ≥ 0, im < 0 | 3r/4 … r (= 0) |

   In bits, the quadrant is q = {sign(im), sign(re) ⊕ sign(im)}, and
   candidate c is k = q·r/4 + c (mod r).
2. **Candidates.** Each of the SIMD/2 lanes has two signed FP×FP multipliers
   and an adder. It tests one candidate per cycle: the table supplies cos_k
   and sin_k for the lane's k, the lane forms the inner product, and compares
   it with the best so far. A line of SIMD/2 components therefore takes K
   cycles. With 8 multipliers at SIMD = 8 this matches the DSP count reported
   for the original FPGA build.
3. **Result.** A Z_r output line needs two accumulator lines. After the
   upper half has finished, `word_valid` pulses with the whole Z_r line, and
   it is written to rd + i.

On a tie the lower candidate wins. A zero accumulator therefore becomes 0,
and so does any value exactly halfway between two directions, in favour of
the lower one.

### Distance (`mcr_dist_unit`)

Each lane computes both a − b and b − a in b bits; the wrap gives the two
modular differences for free. A `min` picks the smaller one. The SIMD
minima go through:

1. a register (Stage0);
2. a registered adder tree of L levels;
3. an accumulator that adds one line sum per cycle.

`in_first` restarts the accumulator and `in_last` marks the end of a vector.
Because of this, the vectors of a search stream through back to back, one
line per cycle, with no gap between prototypes. `result_valid` comes L + 2
cycles after the last line. The distance of an HVDIM vector is at most
HVDIM·r/2, which sets the width of the accumulator (24 bits, a parameter).

### Search (`mcr_search_unit`)

The controller sweeps the class loop, and each finished distance goes to the
search logic. The search logic keeps the smallest distance and its index,
with a strict `<`, so the earliest class wins ties. After HVCLASS distances
it raises `done`, and the index is written to rd and shown on `result`.

### Permutation (`mcr_perm_unit`)

The permutation rotates a vector by whole lines. Output line i reads input
line (i − shift) mod nl, so the hardware cost is an address subtract with one
conditional wrap. A shift by s lines moves each component s·SIMD positions
up. The shift has to be below nl; an assertion checks this.

## Capacity at the default configuration

| item | size |
|---|---|
| Z_r scratchpad | 512 lines × 32 bits |
| Z_r vector of HVDIM components | HVDIM/2 bytes |
| accumulator scratchpad | 128 lines × 128 bits |
| accumulator of HVDIM components | 4·HVDIM bytes |

With that:

- **D = 64.** Everything fits: the accumulator is 256 B, and 64 prototypes
  fit in one Z_r scratchpad.
  - A search over more classes (for example 100) has to be split over two
    scratchpads. The host runs two `OP_SEARCH` commands and then two
    `OP_DIST` commands to pick the nearer winner. `tb_mcr_workloads` does
    this.
  - Feature keys for wide inputs (hundreds of features) are streamed in
    through the LSU.
- **HVDIM = 512.** This is the largest vector that can be bundled and
  normalized with a 2 KB accumulator scratchpad.
- **HVDIM = 1024 and 2048.** Binding, permutation and distance work up to
  2048 components. Superposition needs a 4 KB or 8 KB accumulator
  scratchpad: set `SPM_BYTES` accordingly.

`SPM_BYTES` is the size of each of the four scratchpads; one parameter sets them all.

## Parameters of `mcr_hdcu`

| parameter | default | meaning |
|---|---|---|
| `R` | 16 | modulus, a power of two ≥ 4 |
| `SIMD` | 8 | components per cycle, a power of two (8, 16, 32 and 64 are the usual choices) |
| `FP` | 16 | accumulator bits per real/imaginary part |
| `SPM_BYTES` | 2048 | bytes per scratchpad |
| `N_ZR_SPM` | 3 | number of Z_r scratchpads (1 to 4, the range of the 2-bit `spm` field) |
| `FU_EN` | 5'b11111 | unit enables: bind, sup, norm, perm, dist/search |
| `AMP` | 31 | cos/sin table amplitude |
| `DW` | 24 | width of the distance and result |

HVDIM and HVCLASS are run-time values, loaded with `OP_CFG`. After reset
they are SIMD and 1. Elaboration stops with an error if R or SIMD is not a
power of two, if R is below 4, if SIMD is below 2, or if N_ZR_SPM is
outside 1 to 4.

## Relation to the original description

The architecture follows the published MCR-HDCU design:

- the units and their names, and the three Z_r scratchpads plus one wide
  accumulator scratchpad;
- the shared cos/sin tables;
- the structure of the distance unit: double subtractors, min, Stage0,
  tree adder, ADD/ACC;
- superposition holding the Z_r operand for two cycles;
- quadrant-restricted winner-take-all normalization;
- block-cyclic permutation by address offsets;
- search with a best-so-far register and index write-back;
- the latency of each operation;
- the configuration r = 16, FP = 16, four 2 KB scratchpads, SIMD 8 to 64.

The following are this design's own choices, or departures from that
description:

- **Host interface.** The original is driven by custom RISC-V instructions
  decoded in the host core. Here the command arrives already decoded
  (`cmd_t`) with a req/busy handshake. The encoding, the operand fields and
  `OP_CFG` are this design's own.
- **LSU access.** The port carries one FP·SIMD-bit word per cycle. It is
  granted only while the coprocessor is idle.
- **Table contents.** The fixed-point scale of the cos/sin table (AMP) was
  not specified. The table entries are FP bits wide. One drawing of the
  original labels the table output as b·SIMD bits, but its text speaks of
  fixed-point values, and the text was followed.
- **Accumulator layout and start of a bundle.** The accumulator line layout
  and `OP_SUP_INIT` are own choices. The original assumes the first operand
  is already in Cartesian form, but does not say how it gets there.
- **Normalization of zero.** The original breaks a zero sum by the mean of
  the bundled inputs. That rule is not implemented, because the accumulator
  no longer has the inputs. Ties go to the lowest direction instead.
- **Candidates tested one after another.** The normalization candidates are
  tested one per cycle, to match the stated latency 2·nl·(r/4+1). One passage
  of the original calls the method parallel over the candidates.
- **Pipeline overhead.** Every operation takes one to four cycles more than
  the nominal latency, for the scratchpad read, write-back and the
  distance-unit registers.
- **Unspecified details.** These were chosen here: the rotation direction of
  the permutation, the tie rules, operand gating, the prototype layout for
  search, and writing the distance or index zero-extended into a Z_r line.
- **Memories.** The scratchpads are plain synchronous arrays: two read ports
  and one write port for a Z_r scratchpad, one of each for the accumulator
  scratchpad. A read during a write returns the old data. On an FPGA these
  map to block RAM; an ASIC would need macros with these ports.
- **Reset.** Reset (active-low `rst_n`, asynchronous) clears only control
  state. Memory contents are undefined until written.

## Not included

- **The host core and its instruction decoder.** The command and LSU ports
  are where they would connect.
- **CORDIC normalization.** It was discussed as an alternative to the
  winner-take-all approach, and is not part of this design.

## Files

| file | contents |
|---|---|
| `rtl/mcr_pkg.sv` | types (`op_e`, `opnd_t`, `cmd_t`), defaults, fixed-point trig functions |
| `rtl/mcr_hdcu.sv` | top level |
| `rtl/mcr_ctrl.sv`, `rtl/mcr_hw_loop.sv` | control unit and hardware loops |
| `rtl/mcr_spmi.sv`, `rtl/mcr_spm.sv`, `rtl/mcr_sup_spm.sv` | scratchpad interface and memories |
| `rtl/mcr_fu_map.sv` | input/intermediate/output mapping |
| `rtl/mcr_bind_unit.sv`, `rtl/mcr_perm_unit.sv` | binding, permutation addressing |
| `rtl/mcr_trig_lut.sv`, `rtl/mcr_sup_unit.sv`, `rtl/mcr_norm_unit.sv` | cos/sin tables, superposition, normalization |
| `rtl/mcr_dist_unit.sv`, `rtl/mcr_search_unit.sv` | distance, search |
| `tb/mcr_ref_pkg.sv` | reference model (real-valued trig, integer modular arithmetic) |
| `tb/tb_<module>.sv` | self-checking test of each module |
| `tb/tb_mcr_hdcu.sv` | end-to-end test of the top (see below) |
| `tb/tb_mcr_workloads.sv` | seven classification-shaped workloads at default parameters |
| `tb/tb_mcr_workloads_d1024.sv` | four of them at D = 1024 with 4 KB scratchpads |
| `tb/tb_mcr_simd_sweep.sv`, `tb/mcr_hdcu_ops_env.sv` | every basic operation at SIMD 8/16/32/64 and HVDIM 64/512/2048 |

## Verification and simulation

Every testbench:

- checks the module against values computed independently in
  `mcr_ref_pkg` or inside the testbench;
- checks cycle counts where the latency is defined;
- has a watchdog;
- ends by printing `TB_RESULT checks=<n> failures=<n>`.

`tb_mcr_hdcu` runs a full classification at HVDIM = 64 and at HVDIM = 512,
loading data through the LSU. The run covers:

- binding, superposition and normalization;
- search and distance;
- unbinding and permutation;
- a held command;
- LSU requests refused while busy;
- a second instance built with only the binding unit.

It counts each mechanism, and fails if one never occurs. The mechanisms
are: every operation, accumulation, modular wrap, all four normalization
quadrants, a changing search winner, held commands, refused LSU requests
and a disabled unit.

`tb_mcr_workloads` uses the top with no parameter changes.
`tb_mcr_workloads_d1024` changes only `SPM_BYTES`.

`tb_mcr_simd_sweep` builds the top at SIMD = 8, 16, 32 and 64. For each
width it runs binding, unbinding, permutation and distance at
HVDIM = 64, 512 and 2048, plus superposition and normalization wherever the
accumulator fits. It checks all results and busy times.

To run a testbench with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mcr_pkg.sv tb/mcr_ref_pkg.sv tb/tb_mcr_workloads.sv --top-module tb_mcr_workloads
./obj_dir/Vtb_mcr_workloads
```

Replace `tb_mcr_workloads` with any other testbench name. Every test runs in
well under a second once built. The RTL has no simulator-specific code. It
also reads into Yosys through its SystemVerilog (slang) front end and
synthesizes.

Verilator reports some lint warnings, and they are harmless:

- unused parameters and bits, where a narrower configuration does not use
  all of a shared type;
- the asynchronous reset also used in assertion `disable iff` clauses.
