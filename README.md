# Matrix storage and address generation for a reuse-3 quasi-cyclic SC-LDPC decoder

Spatially coupled LDPC (SC-LDPC) codes reach their good thresholds only at
long lengths, around 100,000 bits. A decoder for such a code has to know its
parity-check matrix H: for every edge of the Tanner graph, which check node
and which bit node it connects. Storing that edge list for a 100K code takes
hundreds of FPGA block RAMs.

The design here stores the matrix of a *quasi-cyclic* SC-LDPC code whose
circulants are *reused with period 3* along the coupled chain. The whole
103,200-bit code is then fixed by 24 shift values, few enough to keep in
logic rather than block RAM. A small pipeline expands them back into the
412,800 (check node, bit node) address pairs of H, at one pair per clock.

This RTL covers only the matrix store and the address generator. The node
processors and message memories of a decoder would consume its output and
are not included.

## The code

The default build is for the regular (d_l, d_r, L) = (4, 8, 129) SC-LDPC code,
lifted by M = 400:

| quantity | value |
|---|---|
| bit nodes per protograph n_b, check nodes n_c | 2, 1 |
| coupled protographs L | 129 |
| circulant size M | 400 |
| code length N = n_b·M·L | 103,200 |
| check nodes (L + d_l − 1)·M | 52,800 |
| rate (n_b·L − n_c·(L + d_l − 1)) / (n_b·L) | 126/258 = 0.488 |
| circulants n_b·d_l·L | 1032 |
| edges (ones in H) | 412,800 |

**Block structure.** H is a grid of M×M blocks. It has 132 block rows j and
258 block columns c. Block column c belongs to protograph t = c / n_b and
holds a circulant in each of the d_l block rows t, t+1, …, t+d_l−1. Every
other block is zero. This gives the usual staircase, with each protograph
coupled to the d_l − 1 protographs after it.

**Circulants.** A circulant I(p) is the M×M identity matrix shifted
cyclically: row r has its single one in column (r + p) mod M. So the edge in
row r of the circulant at block (j, c) joins:

    check node  j·M + r
    bit node    c·M + (r + p) mod M

**Reuse with period T = 3.** A plain QC SC-LDPC code gives every protograph
its own set of n_b·d_l = 8 circulants, 1032 shifts in all. Here protograph t
uses the set of protograph t mod 3, so only 3·8 = 24 shifts exist. For a
(3,6) code the pattern looks like this:

    A D
    B E H L
    C F J M Q T
        K N R U A D
            S V B E
                C F ...

Reuse with T = 1 or T = 2 forces short cycles in the Tanner graph. Every bit
lies on a 6-cycle with T = 1 and on an 8-cycle with T = 2, and decoding
suffers. With T = 3 the inevitable cycles have length 10, and the code decodes
as well as one with no reuse. That is why period 3 is the configuration built.

**The shift table.** The 24 shifts sit in `qc_sc_ldpc_pkg::DEF_SHIFTS`, 16 bits
per entry. The circulant at block (j, c) uses entry

    i = ((t mod T)·d_l + k)·n_b + b,   t = c / n_b,  k = j − t,  b = c mod n_b

No published shift values exist for this code, so the table is this design's
own. The values were drawn at random below M. The table was kept because the
matrix it produces has no 4-cycles: no two block rows and two block columns
whose four circulants satisfy p(j1,c1) − p(j2,c1) + p(j2,c2) − p(j1,c2) ≡ 0
(mod M). The end-to-end testbench checks this again, using shifts read back
from the hardware's own output. The table avoids 4-cycles only. It was not
optimised for girth beyond that, and it has not been checked for
bit-error-rate performance.

## The address pipeline

A command names one circulant by its *element position*: a block row (the
vertical position) and a block column (the horizontal position). For that
circulant the hardware emits its M edges as address pairs, one per clock.
Five units form a four-stage pipeline:

```
 cmd_v, cmd_h ─► addr_counter ──┬─► cn_addr_gen ──(j·M+r, r)──┐
                  (j, c, r)     │                             ├─► cyclic_shift ─► output_ctrl ─► cn_addr, bn_addr
                                └─► bn_addr_gen ──(c·M, p)────┘   c·M+(r+p) mod M
```

* **Address counter** (`addr_counter`). Takes a command and checks that the
  staircase has a circulant at that position (0 ≤ j − c/n_b < d_l and
  c < n_b·L). It then counts the row offset r from 0 to M−1. A position that
  holds a zero block is dropped, and `cmd_err` pulses for one clock.
* **Check node address generator** (`cn_addr_gen`). Forms j·M + r and passes
  r on.
* **Bit node address generator** (`bn_addr_gen`). Holds the 24-entry shift
  table as constant logic and looks up p for (j, c). It also forms the column
  base c·M.
* **Cyclic shift unit** (`cyclic_shift`). Computes (r + p) mod M with one
  add, one compare and one conditional subtract, which works because r and p
  are both below M. It adds the column base to give the bit node address.
* **Output controller** (`output_ctrl`). Presents each address pair with
  `out_valid` and marks the last edge of each circulant with `out_last`. It
  counts the edges and circulants delivered since reset, and it asserts that
  every circulant ends on exactly its M-th edge.

Shared constants and the table live in the package `qc_sc_ldpc_pkg`.

### Top-level interface (`qc_sc_ldpc_addr_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock; synchronous active-high reset |
| `cmd_valid` / `cmd_ready` | in / out | 1 | handshake for a command; it is taken on a rising edge with both high |
| `cmd_v` | in | 8 | block row j (vertical element position) |
| `cmd_h` | in | 9 | block column c (horizontal element position) |
| `cmd_err` | out | 1 | the last command named an all-zero block |
| `out_valid`, `out_last` | out | 1 | address pair valid; last pair of the circulant |
| `cn_addr` | out | 16 | check node address |
| `bn_addr` | out | 17 | bit node address |
| `edge_count`, `circ_count` | out | 32 | pairs and circulants delivered since reset |

Widths follow from the parameters. Each is the ceiling of log2 of the range
it covers.

### Timing

* A command taken at rising edge k gives its first pair at edge k+4 and its
  last at edge k+M+3.
* `cmd_ready` is high while the pipeline is idle. It is also high during the
  clock that issues row M−1 of the current circulant. Commands held back to
  back therefore stream with no bubble.
* Sending the 1032 circulants in order (column by column, each column's d_l
  block rows) yields all 412,800 edges in 412,800 consecutive clocks.
* There is no back-pressure on the output. A consumer must take one pair per
  clock while `out_valid` is high.

## Where this follows the source design and where it does not

The source design fixes the following, and the RTL follows it:

* the five units and how they connect;
* the clock and synchronous reset as the model's only control inputs;
* element positions as inputs, and check node and bit node addresses as
  outputs;
* the circulant definition;
* the period-3 reuse pattern and the idea of keeping its shifts in logic;
* the code parameters.

This design's own choices are:

* what an "element position" means (one circulant, named by block row and
  block column);
* the valid/ready command handshake and `cmd_err`;
* one clock per pipeline stage and the 4-clock latency;
* the numbering of check nodes and bit nodes (rows and columns of H in order);
* the flags and counters of the output controller;
* the shift table itself and its packing.

The source design gives no insides for any of the units, so each is the
simplest circuit that performs its function.

The original hardware model was a Verilog design for a Kintex-7 FPGA. There,
the reuse-3 version needed no block RAM and ran about 40 % faster than a
block-RAM based store for a plain QC or PEG-constructed code. The RTL here
makes no claim about clock rate or FPGA resource counts. It stores the table
as a constant array that synthesis maps to logic, the same idea.

## Other code sizes

Parameters `M`, `L`, `DL`, `NB`, `T` and `SHIFTS` set the code. All widths
follow from them.

* **25K code** (L = 129, M = 100). Instantiate with `M = 100` and a table
  whose entries are below 100. `tb/tb_qc_sc_ldpc_25k.sv` carries such a table
  (also free of 4-cycles) and runs the whole 103,200-edge matrix.
* **Other periods.** Set `T` and supply a table of T·d_l·n_b entries. T = 1
  and T = 2 work mechanically, but the codes they give have short cycles.
  T = L gives the ordinary QC SC-LDPC code with 1032 shifts.
* `SHIFTS` is a flat vector with entry i at bits [16·i +: 16]. Each entry must
  be below M; an assertion in `cyclic_shift` flags one that is not.

## Verification

Each unit has a self-checking testbench in `tb/`. Each compares the unit
against a model written in the testbench and ends with a
`TB_RESULT checks=… failures=…` line:

| testbench | what it checks |
|---|---|
| `tb_addr_counter` | every grid position of a small code (M=5, L=6), legal or not, with random gaps; row sequence, held position, `cnt_last`, `cmd_err`, no bubble when back to back |
| `tb_cn_addr_gen` | j·M + r, r carried along, one-clock delay of valid/last, with corner values |
| `tb_bn_addr_gen` | shift and column base of all 1032 circulants against the table written in plain (s, k, b) order; outputs hold while idle |
| `tb_cyclic_shift` | (r + p) mod M at the wrap corners and at random |
| `tb_output_ctrl` | pass-through, flags, edge and circulant counters with random gaps |
| `tb_qc_sc_ldpc_addr_top` | the whole default 100K matrix end to end, described below |
| `tb_qc_sc_ldpc_25k` | the same for the 25K code (M = 100) |

The end-to-end test runs the top at its default parameters. It streams all
1032 circulants back to back and compares each of the 412,800 pairs with a
reference built from the circulant definition. It then checks:

* every bit node has degree 4;
* every check node has the degree its block row implies: 8 in the body of the
  chain, 2, 4 or 6 in the terminated rows at either end;
* the matrix has no 4-cycles;
* the rate is one pair per clock;
* the latency is 4 clocks.

It also sends four all-zero positions, which must be rejected, and some
commands with idle gaps. The test counts each mechanism (back-to-back
hand-over, rejected position, idle gap) and fails if one never happens. It
runs in under a second of simulation.

To simulate with Verilator, for example the full-size test:

```
verilator --binary --timing --assert -Irtl \
  rtl/qc_sc_ldpc_pkg.sv rtl/addr_counter.sv rtl/cn_addr_gen.sv rtl/bn_addr_gen.sv \
  rtl/cyclic_shift.sv rtl/output_ctrl.sv rtl/qc_sc_ldpc_addr_top.sv \
  tb/tb_qc_sc_ldpc_addr_top.sv --top-module tb_qc_sc_ldpc_addr_top
./obj_dir/Vtb_qc_sc_ldpc_addr_top
```

For a unit test, list the package, the unit's file and its testbench. The
testbenches change inputs on the falling clock edge and sample outputs on the
falling edge, so they do not depend on how the simulator orders same-edge
events.

## Limits

* The output has no back-pressure, and there is no way to load a new shift
  table at run time. The table is fixed when the design is built.
* The shift table was chosen only to avoid 4-cycles, and its error-rate
  performance has not been simulated.
* No decoder datapath is included: no node processors, message memories or
  iteration control.
