# LUXOR logic cells in SystemVerilog

Compressor trees — the circuits that add many operands at once, count
bits (popcount) or accumulate partial products — are built from
generalised parallel counters (GPCs). Almost every GPC output bit of
weight one is the parity of its input column, so XOR is everywhere in
them. A LUT-based FPGA pays a whole 6-input LUT for each such parity bit.
LUXOR (LUT + XOR) puts a dedicated 6-input XOR gate next to the LUT of
every logic cell, on the same six input pins, selectable on the cell's
existing output path. Two vendor-specific extensions ("LUXOR+") go
further:

* **X-LUXOR+** (Xilinx UltraScale+-style slice) lets the XOR6 result
  steer the carry chain, so a 6-input counter column (the "--06--" atom)
  fits in one quarter slice and the 24-input GPC C06060606:111111111 fits
  in one slice.
* **I-LUXOR+** (Intel Stratix-10-style ALM) adds a majority-of-three gate
  and a full adder (together "MajFA"), so the GPC C25:121 fits in one ALM
  instead of two.

The architecture was proposed by Rasoulinezhad, Siddhartha, Zhou, Wang,
Boland and Leong ("LUXOR: An FPGA Logic Cell Architecture for Efficient
Compressor Tree Implementations"). This repository is an independent RTL
model of those cells, written from that description; it is not the
authors' code. It models cell function (what each configuration computes),
not transistor-level area or delay.

GPC notation used below: C*p_{n-1}…p_0* : *q_{m-1}…q_0* lists the number of
input bits per column (highest column first), then the number of output
bits per column. C6:111 counts six bits of one column into three bits;
C25:121 takes five bits of weight 1 and two of weight 2.

## Files

| file | contents |
|---|---|
| `rtl/luxor_pkg.sv` | configuration structs and mux-select enums for both cell types |
| `rtl/xlux_le.sv` | X-LUXOR+ logic element (one quarter of a Xilinx slice) |
| `rtl/xlux_slice.sv` | four LEs on the in-slice carry chain |
| `rtl/ilux_alm.sv` | I-LUXOR+ adaptive logic module |
| `rtl/ilux_lab.sv` | ten ALMs on a carry chain (a LAB without its local routing) |
| `rtl/luxor_top.sv` | tile: one CLB (two slices) and one LAB, all pins as ports |
| `tb/luxor_maps_pkg.sv` | truth tables / configurations for the GPCs, computed from their definitions |
| `tb/tb_<module>.sv` | self-checking testbenches, one per module |
| `tb/tb_xlux_popcount.sv`, `tb/tb_ilux_popcount.sv` | workload testbenches: whole popcount / BNN compressor trees on pools of cells |

Configuration is static: each cell takes a packed struct (`xle_cfg_t`,
`alm_cfg_t`) as an input port, standing in for configuration memory.

## The X-LUXOR+ logic element (`xlux_le`)

### Vendor datapath kept as is

* LUT-6 on pins A6..A1 (`a[5:0]`, `a[0]` = A1): `O6 = o6_init[A6..A1]`,
  `O5 = o5_init[A5..A1]`.
* Carry logic: `CO = O6 ? CI : DI`, `SUM = O6 ^ CI`, `DI` = O5 or AX.
  `CI` is the chain input, AX, 0 or 1 (`ci_src`).
* Wide mux `F7 = AX ? wide_in : O6`, `wide_in` = O6 of the paired LE.
* AMUX output mux, AQ flip-flop with its own D mux, and a second
  flip-flop (D = O5 or AX) reachable through AMUX. Output A is O6.

### LUXOR: XOR6

`XOR6 = ^a`, selectable on AMUX and the AQ input. With it, C6:111 costs
two LEs: LE0 gives bit 0 (XOR6 on AMUX) and bit 1 (O6), LE1 gives bit 2.
The BNN XnorPopcount of three weight/activation pairs also fits one LE:
feed the weights complemented, so `XOR6 = xnor(w0,x0) ^ xnor(w1,x1) ^
xnor(w2,x2)` is the sum bit, and O6 computes the carry (the majority of
the three XNORs).

### X-LUXOR+: the carry injection (the subtle part)

Three gates are added:

```
ci_inj = XOR6 ? CI : A1          // mux selected by the parity
CI'    = lux_plus ? ci_inj : CI  // feeds the vendor carry mux and SUM
XSUM   = XOR6 ^ CI               // new output, on AMUX / AQ input
CO     = O6 ? CI' : DI           // unchanged vendor logic
SUM    = O6 ^ CI'
```

Goal: count six bits of weight 1 (n = 0..6) plus the carry in (weight 1)
into XSUM (weight 1), SUM (weight 2) and CO (weight 4), so that each LE
handles one "--06--" column pair and CO is exactly the carry the next LE
(two columns up) expects. Write n = p + 2h with p = n mod 2:

* XSUM = p ^ CI is bit 0 of n + CI.
* What remains for weight 2 is h + (p & CI), between 0 and 3 (h = 3 only
  when n = 6, and then p = 0).
* When p = 1 the mux passes CI' = CI, and the ordinary carry logic adds it
  to what the LUT encodes about h.
* When p = 0 the carry contributes nothing at weight 2, and the mux passes
  A1 instead — a value the LUT also sees, which lets CO = O6 ? CI' : O5
  produce a 1 even when O6 = 1 (needed for n = 4) while SUM stays right.

Working through every case gives the LUT contents (used by
`xle_atom06`):

```
O6 = (n == 3) | (n == 2 & !A1) | (n == 4 & A1)      // over A6..A1
O5 = (number of ones among A5..A1) >= 3              // over A5..A1
```

The testbench checks all 128 combinations of six inputs and carry. With
four such LEs on the slice carry chain, LE i covers columns 2i and 2i+1,
and the slice outputs XSUM_i, SUM_i and the final carry: nine bits for 24
inputs, i.e. C06060606:111111111.

Only one of the two orders of the injection mux works. With CI' = XOR6 ?
A1 : CI, no LUT content is correct, so the order above is the one the
cell must have.

### O5 has its own truth table

In the vendor LUT, O5 is the lower half of the O6 table, so O6 equals O5
whenever A6 = 0. The atom above cannot live with that restriction: the
pattern with five ones and A6 = 0 needs O6 = 0 and O5 = 1. Both orders of
the injection mux were tried, and so were other choices of pin, and the
conflict stays. This model therefore gives O5 a separate 32-bit table
(`o5_init`). Loading `o5_init = o6_init[31:0]` gives back the vendor
behaviour. A silicon version would need this, or some other
change not described here: treat this as the least certain part of the
model.

## The I-LUXOR+ ALM (`ilux_alm`)

Pins A, B, C0, D0, C1, D1, E, F; carry `cin`/`cout`; outputs O0..O3.

* Four LUT-4s. The top pair reads {D0,C0,B,A}. The bottom pair reads
  {D1,C1,B,A}, or {D0,C0,B,A} when `bot_shared` is set.
* E picks within the top pair, giving the top LUT-5. F picks within the
  bottom pair, or E when the pairs share inputs, giving the bottom LUT-5.
* F picks between the two LUT-5s, giving the fracturable LUT-6 of A, B,
  C0, D0, E, F. It is only meaningful with `bot_shared`.
* Arithmetic mode: each half's two LUT-4 outputs go into a full adder.
  The carry chain runs `cin` → top adder → bottom adder → `cout`.
* LUXOR: `XOR6 = A^B^C0^D0^E^F`.
* I-LUXOR+ MajFA: `m = MAJ(C0,D0,E)`, then `{mfa_c, mfa_s} = m + C1 + D1`.
* Results:
  * r0: top adder sum or top LUT-5, XOR6, MajFA sum, or LUT-6.
  * r1: top LUT-5 or LUT-6.
  * r2: bottom adder sum or bottom LUT-5.
  * r3: bottom LUT-5 or MajFA carry.
  * Each O_k is r_k or its flip-flop (`reg_out[k]`).

**C25:121 in one ALM.** The GPC takes a0..a4 (weight 1) and b0, b1
(weight 2). In logic, one full adder computes (s', c') from a2..a4.
A second adds a0 + a1 + s' to give (S0, C0), and a third adds b0 + b1 + c'
to give (S1, C1). The pins are assigned as follows:

* a0, a1 go to A, B and a2..a4 go to C0, D0, E.
* The two LUT-5s share those five inputs and give S0 (the parity of
  a0..a4) on O1 and C0 on O2.
* c' is MAJ(a2, a3, a4), so the MajFA with b0, b1 on C1, D1 gives S1 on
  O0 and C1 on O3.

In short, `O1 + 2·(O2 + O0) + 4·O3 = Σa + 2·Σb`.

**C6:111 in two ALMs**: XOR6 on O0 and count bit 1 from the LUT-6 on O1 in
the first ALM, bit 2 from the LUT-6 of the second.

## Slices, LABs and the tile

* `xlux_slice` (N_LE = 4) chains the LEs' carries and pairs them for F7.
* `ilux_lab` (N_ALM = 10) chains the ALMs. In arithmetic mode with
  `alm_add2` it is a 20-bit ripple-carry adder.
* `luxor_top` holds one CLB and one LAB (N_SLICES = 2, N_LE = 4,
  N_ALM = 10). Each slice has its own carry-in port. The two halves share
  only clk, ce and sr. The tile is a test vehicle for both variants of
  the idea, not a real vendor tile. There is no general routing between
  cells: every pin and output is a port.

Timing: every path from pins to outputs is combinational. The flip-flops
load on the rising clock edge, with a clock enable (`ce`) and a
synchronous reset (`sr`). A registered output shows its new value one
edge after its inputs change.

## Configurations (`tb/luxor_maps_pkg.sv`)

| function | what it configures |
|---|---|
| `xle_atom06` | X-LUXOR+ --06-- atom (XSUM on AMUX, SUM through AQ) |
| `xle_xnorpop` | XnorPopcount of pairs on pins {x2,~w2,x1,~w1,x0,~w0} |
| `xle_c6_bit(k)` | C6:111 bit k on O6, XOR6 on AMUX |
| `xle_fa` | full adder A1 + A2 on the vendor carry chain |
| `alm_c25` | C25:121 |
| `alm_c6_bit(k)` | C6:111 bit k on the LUT-6, XOR6 on O0 |
| `alm_add2` | two bits of a ripple-carry adder (X on A, C1; Y on B, D1) |

Every truth table is computed by looping over the input index and
evaluating the arithmetic definition, e.g. `o6_init[i] = popcount(i)[k]`.

## Verification

Each testbench drives its module, compares with integer arithmetic and
prints `TB_RESULT checks=N failures=M`:

* `tb_xlux_le`:
  * random LUT tables;
  * exhaustive XOR6;
  * the full adder on all carry sources;
  * the --06-- atom over all 128 input/carry patterns;
  * vendor fallback with the injection off;
  * XnorPopcount;
  * F7, both flip-flops, clock enable and reset.
* `tb_xlux_slice`: C06060606 against the weighted count (400 random
  vectors plus corners), a 4-bit ripple adder, and C6:111.
* `tb_ilux_alm`: LUT-5s, the two-bit adder, C6:111 and C25:121
  (exhaustive), and the registered outputs.
* `tb_ilux_lab`: a 20-bit adder across ten ALMs, and C25:121 in all ALMs
  at once.
* `tb_luxor_top` runs the default-size tile end to end.
  * The six-operand 7-bit addition used to illustrate X-LUXOR+. The CLB
    compresses the 6×7 bit array in one stage: C06060606 on the even
    columns, C060606 on the odd ones. The LAB carry chain adds the two
    resulting rows.
  * A 24-pair XnorPopcount.
  * C25:121 and C6:111 on the ALMs with registered outputs.
  * It counts each mechanism and fails if one never fired: A1 injection,
    X-LUXOR+ carry out, XOR6 on both families, the MajFA majority, carries
    between ALMs, and registered outputs.
* `tb_xlux_popcount` and `tb_ilux_popcount` run the evaluated
  bit-counting benchmarks as whole compressor trees (see below).

To run one with plain Verilator (packages first):

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/luxor_pkg.sv tb/luxor_maps_pkg.sv rtl/xlux_le.sv rtl/xlux_slice.sv \
  rtl/ilux_alm.sv rtl/ilux_lab.sv rtl/luxor_top.sv tb/tb_luxor_top.sv \
  --top-module tb_luxor_top
./obj_dir/Vtb_luxor_top
```

All testbenches finish in well under a second. The two workload
testbenches instantiate hundreds of cells and take about a minute to
compile.

## What the paper's results need versus this tile

Single GPCs and fused units fit one tile and are simulated. Examples are
C6:111, C25:121, C06060606, C060606, XnorPopcount and the 6×7-bit example.
The evaluated micro-benchmarks do not fit one tile:

* popcount of 128–512 bits needs 78–312 X-LUXOR+ LEs;
* two-column popcount needs 150–586;
* BNN layers of 3×3×64 to 3×3×1024 need 192–3072 fused LEs before their
  compressor trees. These sizes are read from the labels of the paper's
  BNN figure.

The tile has 8 LEs and 10 ALMs. The published mappings come from an ILP
synthesis tool whose outputs are not published, so they are not
reproduced here.

### Workload testbenches

To run the benchmarks anyway, two testbenches build a pool of real cells
and act as its routing:

* `tb_xlux_popcount` has 128 slices (512 LEs) with the carry chained
  slice to slice. It runs the S and D benchmarks in X-LUXOR and X-LUXOR+
  modes, and the BNN layers in X-LUXOR+ mode;
* `tb_ilux_popcount` has 40 LABs (400 ALMs) chained LAB to LAB.

Each tree stage is mapped onto the pool, evaluated, and its outputs become
the next stage's columns. The count of a tree is the sum over its stages.
The mapping is a simple greedy reduction of this design's own:

* X-LUXOR: C6:111 (two LEs) per six bits of a column, C3:11 (one LE) for
  three to five left over.
* X-LUXOR+: first the slice GPCs C060606 and C06060606, three or four
  --06-- atoms chained in one slice. They go wherever columns c, c+2, c+4
  (and c+6) each still hold six bits. The sum bits leave through the LE
  flip-flops, so an X-LUXOR+ stage takes one clock. Each counts as four
  LEs, a whole slice, as in the paper's GPC table. The rest is reduced
  as in X-LUXOR.
* BNN: the fused XnorPopcount LE comes first, one per three pairs.
* I-LUXOR: C6:111 in two ALMs, C3:11 in one ALM.
* I-LUXOR+: C25:121 in one ALM. It takes five bits of a column and up to
  two of the next.

Reduction stops at two rows. A ripple adder on the carry chain then adds
them. The published trees instead end with a (relaxed) ternary adder.
Every result is checked against the exact count.

| benchmark | X-LUXOR LEs greedy / published | X-LUXOR+ LEs greedy / published | I-LUXOR ALMs | I-LUXOR+ ALMs |
|---|---|---|---|---|
| S128 | 88 / 79 | 88 / 78 | 85 | 60 |
| S256 | 177 / 159 | 173 / 154 | 174 | 121 |
| S512 | 347 / 319 | 340 / 312 | 343 | 233 |
| D128 | 176 / 156 | 174 / 150 | 172 | 103 |
| D256 | 348 / 315 | 340 / 298 | 344 | 199 |
| D512 | 695 / 631 | 667 / 586 | 690 | 388 |
| BNN 3×3×64 | – | 448 / – | – | – |
| BNN 3×3×128 | – | 888 / – | – | – |
| BNN 3×3×256 | – | 1756 / – | – | – |
| BNN 3×3×512 | – | 3483 / – | – | – |
| BNN 3×3×1024 | – | 6947 / – | – | – |

The greedy trees use 9–16% more cells than the published optimum.
They also need more stages (5–11 against 3–5), because they do not plan
ahead. They are a functional check, not a reproduction of the area
results. I-LUXOR+ saves 30–44% of ALMs over I-LUXOR with the same
greedy, which matches the size of the published I-LUXOR+ savings.
A stage larger than the pool runs in batches. Every BNN layer size
therefore runs whole, including 3×3×1024 with 3072 fused LEs in its first
stage. The paper gives BNN results only as relative savings, so there is
no published LE count to compare with.
The Intel side of the BNN benchmark is not run. A fused XnorPopcount
ALM would use XOR6 for the sum and the LUT-6 for the carry. No testbench
configures or checks it. Only the Xilinx LE version is verified.

## Where this model departs from, or adds to, the source description

* O5 has its own truth table; see above. This is the one functional
  change to the vendor LUT.
* The injection mux order (XOR6 = 1 passes the carry) is derived, not
  drawn.
* ALM:
  * The LUT-4 → LUT-5 → LUT-6 composition is this model's choice.
  * So is the shared-input switch.
  * So are the per-result output muxes. The vendor output crossbar and
    input muxes are simplified away.
* Xilinx LE:
  * F7 is modelled, but F8 is not.
  * The FF/latch is always a flip-flop.
  * The carry source mux (chain/AX/0/1) is present in every LE, not only
    at the bottom of a chain.
* Flip-flop clock enable and synchronous reset are additions. The cell
  drawings leave control signals out.
* Neither general routing, LAB local interconnect nor the HyperFlex
  registers are modelled.
* Area and delay figures (ASIC synthesis of the cells) are not
  reproduced; this is a functional model.
* Other X-LUXOR+ GPCs combine the --06-- atom with the older --14--,
  --22--, --15-- and --23-- atoms. The LE keeps the vendor carry path those
  atoms use, but their LUT contents are not reproduced or tested here.
