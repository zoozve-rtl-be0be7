# Zoozve vector unit in SystemVerilog

Zoozve is a RISC-V vector extension without strip-mining. In standard RVV, a
long vector goes through a software loop one strip at a time. The loop exists
because an instruction can only name a power-of-two group of at most eight
architectural registers, out of 32.

Zoozve removes that loop in two ways:

- The register file is much larger: 1024 registers of 4096 bits in the main
  configuration.
- Every vector operand is a register group of any length. The instruction
  names the group's first register (a 13-bit *head* field), and a scalar
  register gives the vector length. The hardware then covers every register
  from the head to the tail by itself.

So a 16 000-element dot product is a fixed sequence of about six vector
instructions, whatever the length. The cost falls on the hardware:

- hazard detection must compare register *ranges* of arbitrary extent, not
  register numbers;
- operations whose source and destination have different lengths (gather,
  scatter, reduction) need a path between lanes.

This repository implements that vector unit: the control path with
range-based hazard detection, the lanes, the shuffle engine and the
load/store unit. It is synthesizable RTL, plus testbenches that run the
motivating kernels end to end at the full 64-lane, 1024-register size.

## Register groups

A vector register is `VLEN = 64 * NLANES` bits wide, so `VLENB = 8 * NLANES`
bytes: 512 bytes at the default of 64 lanes.

An operand of `VL` elements, each `EB` bytes wide, with head `h` occupies
registers `h` to `h + ceil(VL*EB / VLENB) - 1`:

- Element `e` of the group lives in register `h + (e*EB) / VLENB`, at byte
  `(e*EB) mod VLENB`.
- That byte belongs to lane `byte / 8`.

A group does not have to fill its last register. For example, 100 int16
elements in 64-byte registers make a 4-register group whose fourth register
holds only 8 bytes. The unused bytes of that last register are never written.

The published formula for the group's last register is
`RG_head + RG_type/VLEN`. For a length that fills whole registers, this is one
past the end. The published drawing of a five-register group shows V3..V7. The
RTL follows the drawing, using the ceiling and the `- 1`.

`VL` is the value of the scalar register named by the `rs_avl` field. The
scalar core passes that value with the instruction, and it is limited to 32
bits.

## Instruction format

All instructions are 64 bits wide. The field positions are the published
ones:

| bits  | field                                                          |
|-------|----------------------------------------------------------------|
| 63:58 | `vd_head[12:7]`                                                |
| 57:45 | `vs2_head` (vector-vector form), or `rs2` in its low 5 bits (vector-scalar form) |
| 44:32 | `vs1_head`                                                     |
| 31:26 | `func6` (operation)                                            |
| 25:23 | `vew`: element width, log2 of the element's bytes (0..3)       |
| 22    | `vm` (decoded, but no masking is done)                         |
| 21:15 | `vd_head[6:0]`                                                 |
| 14:12 | `func3`; bit 2 = 1 selects the vector-scalar (`.vx`) form      |
| 11:7  | `rs_avl`: the scalar register holding VL                       |
| 6:0   | opcode                                                         |

The values inside the fields are this design's own choices. The published
format gives only the positions.

| opcode           | class                   | func6                                                   |
|------------------|-------------------------|---------------------------------------------------------|
| 0001011 custom-0 | load/store              | 0 load `vd <- mem[x[rs2]]`, 1 store `mem[x[rs2]] <- vs1` |
| 0101011 custom-1 | symmetric (lanes)       | 0 add, 1 sub, 2 mul (low half), 3 and, 4 or, 5 xor, 6 move |
| 1011011 custom-2 | asymmetric (shuffle)    | 0 gather, 1 scatter, 2 reduction sum, 3 extract         |

Operand order:

- Vector-vector form: `vd = vs2 op vs1`.
- Vector-scalar form: `vd = vs1 op x[rs2]`. A move in this form broadcasts
  the scalar.

The asymmetric operations:

- gather: `vd[i] = vs1[vs2[i]]` for `i < VL`. The destination is as long as
  the index vector, not as the source.
- scatter: `vd[vs2[i]] = vs1[i]`.
- reduction sum: `vd[0] = vs1[0] + sum(vs2[i])`.
- extract: returns `vs1[x[rs2]]` to the scalar core on the response channel.

The published reduction kernel maps onto these encodings as follows. Its
operands are read as register numbers, so `0` means `x0`.

| mnemonic | encoding |
|----------|----------|
| `vbrdcst v0, 0` | a `.vx` move of `x0` into the group at `v0` |
| `vls.half v0, (t4), a1` | a load with `vew = 1`, base `x[t4]`, VL in `a1` |
| `vredsum v3, v0, v3` | a reduction with `vd = v3`, `vs2 = v0`, `vs1 = v3` |
| `vextract a0, v3, 0` | an extract from `v3` at index `x0 = 0`, with the value returned for `a0` |

An instruction is answered with `error = 1` and otherwise ignored when any of
these holds:

- the opcode or `func6` is unknown;
- `vew > 3`;
- a head lies beyond the register file;
- a group runs past the last register.

`VL = 0` is a no-op.

## Block structure

```
            req (insn, x[rs2], x[rs_avl])          resp (error / extract value)
                         |                                   ^
                +--------v-----------------------------------+--------+
                | zz_main_sequencer                                   |
                |   zz_decoder -> RG extents -> zz_hazard_detect      |
                |   in-flight table (3 units x dst/src0/src1)         |
                +---+-------------------+------------------------+----+
       row (1 register / cycle)   shu_cmd/start/done        lsu_cmd/start/done
                    |                   |                        |
   +----------------v------+   +--------v---------+     +--------v-------+
   | zz_lane #0..#NLANES-1 |<->| zz_shuffle_engine|     | zz_vlsu        |--> AXI4
   | VRF slice + SIMD ALU  |   | zz_xbar + NPE x  |     | one burst per  |   master
   |  ports: row/shu/lsu   |<--| zz_shuffle_pe    |     | register       |
   +-----------------------+   +------------------+     +----------------+
```

`zz_pkg` holds the shared types. These are the instruction fields, the
register-group descriptor `rg_t`, the lane request `valu_row_t`, the lane
port `vrf_port_t`, the unit commands, and the AXI bundle.

## Control path: issuing without strip-mining

`zz_main_sequencer` accepts one instruction per cycle through a valid/ready
handshake. The request carries three values:

- the instruction word;
- the value of `x[rs2]`: the scalar operand, load/store base, or extract index;
- the value of `x[rs_avl]`: the vector length.

In the same cycle, the sequencer decodes the instruction and computes up to
three register groups: one destination and two sources. It then compares
those groups against the groups of the instructions still in flight.

### Hazard detection

There are three execution units: the lanes, the shuffle engine and the
load/store unit. Each runs one instruction at a time, so at most nine groups
are in flight. `zz_hazard_detect` has one comparator per in-flight group. The
comparator reports an *overlap of ranges* (`new.head <= old.tail &&
old.head <= new.tail`). All comparator outputs are OR'ed into a single
`hazard` signal.

Which pairs are compared:

- An in-flight destination is compared against all three groups of the new
  instruction. This catches read-after-write and write-after-write.
- An in-flight source is compared only against the new destination. This
  catches write-after-read.

Some groups have an extent that depends on data: the source of a gather, and
the destination of a scatter. These are recorded as the whole register file.

### Acceptance and dispatch

An instruction is accepted when it is legal, has no hazard, and its unit is
idle. Independent instructions therefore overlap. For example, a long load
and an unrelated add run together.

Two status outputs explain why an instruction is waiting:

- `hazard_stall_o`: it is blocked by a hazard;
- `busy_stall_o`: it has no hazard, but its unit is busy.

Symmetric operations are stepped by the sequencer itself. Starting the cycle
after acceptance, it broadcasts one *row* per cycle to every lane. A row is
one register of each operand group, plus the number of valid bytes in it. A
group of R registers therefore occupies the lanes for exactly R cycles.

## Lanes

Each `zz_lane` holds a 64-bit slice (bytes `8l..8l+7`) of each of the
`NREGS` registers. It also holds a SIMD ALU for 8-, 16-, 32- and 64-bit
elements.

The lane computes its own byte enables from the row's byte count. This is
how the tail of a group is masked.

The register file slice has three access paths, all with an asynchronous
read and a byte-enabled write on the clock edge:

- the ALU row;
- the shuffle-engine port;
- the load/store port.

The three paths never target the same register at the same time, because
hazard detection keeps the units on disjoint groups. The register file is not
reset.

## Shuffle engine

`zz_shuffle_engine` executes the inter-lane instructions. It contains
`NPE = 2` processing elements (`zz_shuffle_pe`) behind a crossbar (`zz_xbar`)
that reaches every lane's shuffle port.

PE `p` handles elements `p`, `p+NPE`, and so on. For each element of a
gather or scatter, the PE makes three accesses:

1. read the index;
2. read the source element;
3. write the destination element.

Each access moves one 64-bit lane word, and the PE selects the element's
bytes from it.

When two PEs address the same lane in one cycle, the lower-numbered PE wins.
The other PE repeats its access in the next cycle, and `xbar_conflict_o`
reports the lost cycle.

For a reduction, each PE accumulates a partial sum. PE 0 starts from
`vs1[0]`. At the end, the engine adds the partial sums and writes the result
into element 0 of `vd`, which takes one extra cycle.

Cost: an uncontended gather or scatter costs about `3*VL/NPE` cycles, and a
reduction about `VL/NPE` cycles.

## Load/store unit

`zz_vlsu` moves one group between memory and registers. Register `r` of the
group maps to the `VLENB` bytes at `base + r*VLENB`.

Each register is one AXI4 INCR burst of 8-byte beats, and beat `k` is lane
`k`'s slice. The unit keeps one burst in flight at a time. For the last,
partial register:

- a load writes only the bytes of the vector;
- a store clears the strobes of the remaining bytes.

The base address must be 8-byte aligned. Its low three bits are ignored.

The AXI bundle is simplified. It has 64-bit data, no IDs, and no
cache/prot/lock signals. Its fields are in `zz_pkg::axi_req_t` and
`axi_resp_t`.

## Timing summary

| operation                                   | cycles (no memory stalls, no conflicts)            |
|---------------------------------------------|----------------------------------------------------|
| symmetric op over R registers               | R, starting the cycle after acceptance             |
| load / store of R registers                 | about R * (NLANES + 2), one burst after another    |
| gather / scatter of VL elements             | about 3*VL/NPE + 2                                 |
| reduction of VL elements                    | about VL/NPE + 3                                   |
| error response                              | the cycle after acceptance                         |

## What follows the published design and what does not

These parts follow the published design:

- the 64-bit format and its field positions;
- 13-bit heads;
- VL from `rs_avl`;
- register groups of any length;
- range comparators OR'ed into one hazard signal;
- lanes for symmetric operations;
- a shuffle engine of a crossbar and several PEs for asymmetric operations;
- gather and scatter with their published semantics;
- an AXI interface;
- the 64-lane, 1024-register, VLEN = 4096 configuration;
- two PEs, as drawn.

These are this design's own choices, where the description stops:

- the opcode and `func6` values, and the `vew` encoding;
- the ALU's operation set;
- the reduction and extract semantics;
- the lane slicing;
- the crossbar's arbitration;
- the single-instruction-per-unit issue policy;
- the valid/ready interface to the scalar core;
- the AXI subset and burst plan;
- error responses.

These parts of the extension are not implemented:

- **Masking.** The `vm` bit is decoded only.
- **`vsetcsr`.** This instruction would widen heads beyond 13 bits. It is not
  needed for 1024 registers.
- **Fixed-point helpers** such as shifts or high-half multiplies. Without
  them, a scaled int16 FFT cannot be written with this operation set. Only
  wrap-around integer arithmetic is available. The FFT's data flow (bit-reversal permutation,
  butterfly gathers, twiddle multiplies) runs exactly in 16-bit modular
  arithmetic instead (see Verification).

The scalar core, the memory system and the compiler are outside this RTL.
The published clock (400 MHz) and the area figures are process results, and
are not reproduced here.

## Sizing

At the defaults, the register file is 1024 registers × 4096 bits = 4 Mbit. It
is written as plain arrays: 64 lanes × 1024 × 64 bits.

A 16 384-element int16 vector takes 64 registers, so a dot product or axpy at
that size (x, y and one temporary) uses 192 of the 1024 registers. The
largest FFT size considered, 2048 complex int16 points, needs 8 registers per
component vector.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench                  | what it checks                                                        |
|----------------------------|-----------------------------------------------------------------------|
| `tb_zz_decoder`            | random instructions against an independent field extractor and legality model |
| `tb_zz_hazard_detect`      | random in-flight tables against a per-register overlap model          |
| `tb_zz_lane`               | random ALU rows over all widths, ops and tails against a reference, plus the two extra ports |
| `tb_zz_xbar`               | random request mixes: routing, grants, priority                       |
| `tb_zz_shuffle_engine`     | random gather / scatter / reduction / extract on real lanes against a byte-level model; counts conflicts |
| `tb_zz_vlsu`               | random loads and stores against memory with wait states; checks that bytes past the vector are untouched |
| `tb_zz_main_sequencer`     | row stepping and tail count, RAW/WAR stalls, overlap of independent work, busy stalls, errors, extract, VL = 0 |
| `tb_zz_top`                | end to end at 4 lanes and 64 registers, with 100-element vectors (7-register groups) |
| `tb_zz_top_full`           | the same program on `zz_top` with all defaults: 64 lanes, 1024 registers, 16 000-element vectors |
| `tb_zz_blas`               | dot product and axpy for N = 512..16384 int16 elements on `zz_top` with all defaults |
| `tb_zz_fft`                | FFT data flow for N = 32..2048 on `zz_top` with all defaults, checked against a direct DFT |

`tb_zz_blas` runs the two linear kernels at every power-of-two size from 512
to 16 384 elements. The instruction sequence is the same at every size: six
instructions for the dot product and three more for axpy. Only the group
length changes, from 2 registers to 64. At 16 384 elements, the dot product
takes about 19 400 cycles and the axpy about 5 900. Both are dominated by the
64-beat AXI bursts and the two-PE reduction.

`tb_zz_fft` runs the FFT kernel on `zz_top` with all defaults, for N = 32, 64, ..., 2048 points. It uses a radix-2 decimation-in-time structure over the whole vector:

- a bit-reversal gather;
- per stage, two gathers to fetch each output's butterfly partners, then a twiddle multiply and an add.

The index and twiddle tables are loaded with vector loads. The arithmetic is exact in the ring of 16-bit integers, with an N-th root of unity taken as a power of 5. This stands in for the fixed-point scaling the operation set lacks. The result is compared with a direct O(N²) DFT computed in the testbench. At 2048 points, the 82-instruction program (11 stages, 8 registers per vector) takes about 97 000 cycles.

The two top-level testbenches share `tb_zz_program.svh`. It runs a dot
product, an axpy, and a bit-reversal gather followed by the inverse scatter,
and then sends an illegal instruction. All operations use single
instructions over whole groups.

The results are compared with values computed in the testbench. The program
also counts how often each mechanism happened: hazard stalls, busy stalls,
crossbar conflicts, tail groups, multi-register groups, the extract response
and the error response. A mechanism that never happened counts as a failure.
At full size the program takes about 58 000 cycles.

`tb_axi_mem` is a behavioural AXI memory with random wait states, used only
by the testbenches.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/zz_pkg.sv tb/tb_zz_top.sv --top-module tb_zz_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Verilator finds every other module through `-Irtl -Itb` by its file name. For
another testbench, change the file and `--top-module`. `-Wno-fatal` keeps
width and unused-signal lint warnings from stopping the build. The
`+verilator+rand+reset+2` flag starts every uninitialised variable at a random
value. The design and the testbenches reset or initialise everything they
read.

Handshake rules are checked with immediate assertions inside clocked blocks.
For example: a unit is never started while busy, the load/store unit's last
beat matches its count, and the sequencer never sends two responses in one
cycle.
