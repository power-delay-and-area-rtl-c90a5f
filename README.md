# Majority voters for triple modular redundancy

A TMR (triple modular redundancy) stage runs three identical copies of a
circuit. It then passes their three results X, Y and Z through a majority voter.
The voter output V is the value that at least two copies agree on:

    V = XY + YZ + XZ

A wrong result from any one copy is therefore masked. The voter itself is not
redundant, so its cost and its own sensitivity to upsets matter. The same
3-input majority function can be built from standard cells in many ways:
AND/OR, NAND, XOR plus multiplexer, or one complex cell such as AO222 or OA222.
Each choice gives different power, delay and area.

This RTL describes 14 such voter structures gate for gate, as published in
P. Balasubramanian and N. E. Mastorakis, "Power, Delay and Area Comparisons of
Majority Voters relevant to TMR Architectures". It also gives a voting stage
that feeds all 14 voters the same three copies, the arrangement used to compare
them. Each voter is built from explicit cell instances rather than a
behavioural `assign v = maj(x,y,z)`. That way the netlist keeps the structure
whose merits are being compared.

## The cell library

`rtl/cell_*.sv` are one-module cells. Each one is a single Boolean function
applied bit by bit over a `W`-bit bus. At `W = 1` it is one standard cell:

| cell | function |
| --- | --- |
| `cell_inv` | ~a |
| `cell_and2`, `cell_or2`, `cell_or3` | a·b, a+b, a+b+c |
| `cell_nand2`, `cell_nand3` | ~(a·b), ~(a·b·c) |
| `cell_xor2`, `cell_xnor2` | a⊕b, ~(a⊕b) |
| `cell_ao21`, `cell_oa21` | ab + c, (a+b)c |
| `cell_ao22`, `cell_oa22` | ab + cd, (a+b)(c+d) |
| `cell_ao222`, `cell_oa222` | ab + cd + ef, (a+b)(c+d)(e+f) |
| `cell_mux2` | s ? d1 : d0 |
| `cell_mux4` | d[{s1,s0}] |

Each cell carries the `keep_hierarchy` attribute. A synthesis tool that honours
it leaves every gate of a voter as its own instance. You can then map each
instance onto the matching library cell by hand or with a dont-touch
constraint. The RTL models no drive strength, delay or power.

## The 14 voters

All voters have the same interface: `x`, `y`, `z` in and `v` out, each
`WIDTH` bits wide. `WIDTH` defaults to 1, the voter as published. A larger
`WIDTH` repeats the one-bit gate network for every bit, which votes a bus bit
by bit. All 14 compute exactly the same function. The table lists the
structure of each voter. It also lists each voter's origin. The paper credits
AO_MV, NAND_MV, KP_MV, BN_MV and AO222_MV to earlier work. It calls OA222_MV
proposed, and it lists the other voters marked "new" together with OA222_MV.
The last column is the figure of merit the paper reports,
100/(power·delay·area), measured on a 32/28 nm library. Higher is better.

| module | structure | equation | cells / levels | origin | FOM |
| --- | --- | --- | --- | --- | --- |
| `ao_mv` | 3×AND2 → OR3 | XY+YZ+XZ | 4 / 2 | classical | 26.06 |
| `nand_mv` | 3×NAND2 → NAND3 | same, De Morgan | 4 / 2 | classical | 100.69 |
| `kp_mv` | 2×XOR2 → INV+AND2 → MUX2 | see below | 5 / 4 | earlier work | 3.48 |
| `bn_mv` | XOR2 → MUX2 select | X⊕Y ? Z : Y | 2 / 2 | earlier work | 17.10 |
| `xnm_mv` | XNOR2 → MUX2 select | X⊙Y ? Y : Z | 2 / 2 | new | 19.38 |
| `x2ao_mv` | XOR2 → 2×AND2 → OR2 | (X⊕Y)Z + XY | 4 / 3 | new | 10.97 |
| `xao22_mv` | XOR2 → AO22 | (X⊕Y)Z + XY | 2 / 2 | new | 29.34 |
| `oao22_mv` | OR2 → AO22 | (X+Y)Z + XY | 2 / 2 | new | 103.26 |
| `aoa22_mv` | AND2 → OA22 | (X+YZ)(Y+Z) | 2 / 2 | new | 118.45 |
| `oaao_mv` | OA21 → AO21 | N=(X+Y)Z; V=XY+N | 2 / 2 | new | 72.71 |
| `aooa_mv` | AO21 → OA21 | K=YZ+X; V=(Y+Z)K | 2 / 2 | new | 101.15 |
| `ao222_mv` | AO222 | XY+YZ+XZ | 1 / 1 | earlier work | 209.22 |
| `oa222_mv` | OA222 | (X+Y)(Y+Z)(X+Z) | 1 / 1 | new | 272.75 |
| `mux41_mv` | MUX4, selects X,Y | inputs X,Z,Z,Y | 1 / 1 | MUX realisation | 68.11 |

Most rows are the majority equation written as a sum of products or a product
of sums. Some are factored first, and some merge their gates into complex
cells. The multiplexer-based voters work differently, so here is how they work.

**bn_mv and xnm_mv.** If X = Y, that value is already the majority, whatever Z
is. The multiplexer passes Y in that case. If X ≠ Y, then Z decides. The only
difference between the two voters is whether the comparison is XOR (select 1
means "disagree") or XNOR (select 1 means "agree"), which swaps the data inputs.

**mux41_mv.** X and Y are the select lines of a 4:1 MUX. Selects 00 and 11
return X and Y, which are equal to each other there. Selects 01 and 10 return
Z. That is equation V = X(X'Y') + Z(X'Y) + Z(XY') + Y(XY).

**kp_mv.** X⊕Y and Y⊕Z are compared. A small "priority encoder" (an inverter
and an AND gate) computes `sel = (X⊕Y)·~(Y⊕Z)`. The MUX passes X when sel = 0
and Z when sel = 1. The three cases:
- sel = 1: X differs from Y, but Y equals Z, so Z is the majority.
- X = Y: sel = 0 and X is passed, which is correct.
- All three copies differ pairwise: this cannot happen with binary values.
  X = Z then, so either input would be right.

The schematic does not mark which encoder input carries the inverter. Only the
placement used here gives a majority voter. With the inverter on the other
input, X = Y ≠ Z would output Z.

## The voting stage: `tmr_voter_top`

`tmr_voter_top` is the voter box of a TMR stage. Its inputs are the outputs
`x`, `y`, `z` of the three function modules, which are not part of this RTL
since they can be any circuit. All 14 voters are instantiated on these inputs.
Their outputs appear in `v_all`, indexed by `mv_pkg::voter_e`; for example
`v_all[mv_pkg::OA222_MV]`. The parameter `VOTER` chooses which of them drives
the stage output `v`. It defaults to `OA222_MV`, the structure with the best
reported figure of merit. The choice is made at elaboration: there is no
run-time multiplexer. If you need one voter only, leave `v_all` unconnected and
synthesis removes the other 13. Or instantiate the voter module directly.

| parameter | default | meaning |
| --- | --- | --- |
| `WIDTH` | 1 | bits voted, each independently |
| `VOTER` | `OA222_MV` | voter whose output is `v` |

The stage is purely combinational. It has no clock or reset, and `v` follows
the inputs after the cell delays. In a local, distributed or global TMR
architecture, you place this stage after the triplicated registers and/or
logic. In a global architecture, the voter itself is triplicated too.

## How far the RTL follows the published schematics

Every gate, its type and its inputs come from the published schematics and
equations, with these exceptions, all of which leave the function unchanged:

- **kp_mv:** which priority-encoder input is inverted was chosen as described
  above, because it is not printed.
- **xnm_mv:** MUX input 1 comes from Y. The schematic's junction could be read
  as X or Y. The two are the same whenever that input is selected.
- **mux41_mv:** X is taken as the high select bit. The order is not printed,
  and it does not matter because inputs 1 and 2 are both Z.
- **ao222_mv and oa222_mv:** these are built as the AO222/OA222 cells drawn,
  with pairs XY, YZ, XZ. The text says the AO222 voter is realised "based on
  equation (3)", and the OA222 voter "(4)", after factoring inside the cell.
  That concerns the transistor network, which RTL does not describe.
- **WIDTH, the 14-voter bank and the `VOTER` selection** are additions of this
  RTL.

The power, delay and area values in the table are the published measurements.
Nothing in this RTL reproduces them. They depend on the cell library, the
fanout-of-4 load and the 1.05 V / 25 °C corner used there.

## Testbenches and simulation

Every testbench in `tb/` checks itself. It compares the outputs against a
majority worked out by counting ones per bit, not against any voter equation.
It ends by printing `TB_RESULT checks=N failures=M`.

- **`tb_<voter>.sv`** (one per voter) covers three things:
  - the full truth table at `WIDTH = 1`;
  - 500 single-copy faults at `WIDTH = 16`, each of which must be masked;
  - 2000 random 16-bit triples.
- **`tb_tmr_voter_top.sv`** runs the stage at its default parameters. It first
  applies the 8 truth-table rows. It then applies 1208 vectors at 1 ns
  intervals, the stimulus rate used in the comparison. The testbench acts as
  the three function modules and injects no fault, a fault on one copy (copy 1,
  2 or 3), or faults on two copies. It checks the following:
  - all 14 voters agree with the majority;
  - `v` equals the OA222 output;
  - single faults are masked;
  - double faults out-vote the good copy.

  It fails if any of the five situations never occurred.
- **`tb_tmr_voter_sel.sv`** builds one 8-bit stage for each `VOTER` value. It
  checks that each stage's `v` is its selected voter's output and is the
  majority.

To run one with Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/1ps \
        -y rtl -y tb +libext+.sv rtl/mv_pkg.sv tb/tb_tmr_voter_top.sv \
        --top-module tb_tmr_voter_top -o sim
    ./obj_dir/sim

Replace the testbench name to run any other testbench. Each finishes in well
under a second.
