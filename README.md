# Fault tolerant reversible adders: full adder, ripple-carry, carry look-ahead and a 16-bit carry-skip adder

A reversible circuit computes a one-to-one function: it has as many outputs
as inputs, and every output vector belongs to exactly one input vector. It
cannot lose information. The catch is that ordinary arithmetic does lose
information. An adder takes 2n+1 bits in and gives n+1 out. So a reversible
adder carries extra *constant inputs*, tied to 0, and extra *garbage
outputs*, which nobody reads. A reversible circuit also may not fan a wire
out. A value needed twice has to be copied by a gate.

These adders are also built only from *parity-preserving* reversible gates.
For such a gate, the XOR of all inputs equals the XOR of all outputs. A
netlist of such gates keeps that property. With constants at 0, this holds
for every adder here:

    ^x ^ ^y ^ c0  ==  ^sum ^ cout ^ ^garbage

If a fault flips any single line, the two sides differ. Comparing the
parity of the outputs with the parity of the inputs therefore detects any
single-line fault without checking anything in between. That is why every
garbage line is an output port of these modules, not an internal wire.

The RTL models the gate netlists at the Boolean level. Each gate is a module
with the gate's equations, and each adder wires the gates exactly as the
published circuits do. The sums and carries are those of a normal adder;
what the netlist adds is the structure (gate counts, constants, garbage) and
the parity property.

## The three gates

| module     | gate                     | outputs                                        | how the adders use it |
|------------|--------------------------|------------------------------------------------|-----------------------|
| `mig_gate` | MIG, 4x4 (modified IG)   | P=A, Q=A^B, R=AB^C, S=AB'^D                     | half-adder terms, full adder |
| `f2g_gate` | Feynman double, 3x3      | P=A, Q=A^B, R=A^C                               | B=C=0: three copies of A (the only legal fan-out); C=0: Q merges two terms |
| `nft_gate` | NFT (new fault tolerant), 3x3 | P=A^B, Q=B'C^AC', R=BC^AC'                 | A=0: R = B&C, a parity-preserving AND |

The MIG's first three outputs are a Peres gate. Its fourth output exists
only to make the gate parity preserving, and it is simplified from the IG
gate it derives from (AB'^D instead of BD^B'(A^D)).

The F2G "merge" use needs some care. With C=0, Q = A^B, which is an XOR and
not an OR. The look-ahead adder only merges terms that can never both be 1.
One example is x0&y0 and c0&(x0^y0). For such terms XOR and OR agree.

## Full adder (`ftfa`)

Two MIG gates, two constant inputs, three garbage outputs:

    MIG1 (A, B, 0, 0)       -> A, A^B, AB, G1=A&~B
    MIG2 (A^B, Cin, AB, A)  -> G2=A^B, Sum, Cout, G3=(A^B)&~Cin ^ A

G2 is the propagate term p = a^b. The ripple-carry and carry-skip adders
count it as garbage, but the carry-skip and look-ahead logic also use it as
their propagate input. No extra gate is needed to form p.

## Ripple-carry adder (`ft_rca`)

N full adders, carry out of stage i to carry in of stage i+1. Ports
`p[N-1:0]` (the G2 lines) and `g[2N-1:0]` (G1 at `g[2i]`, G3 at `g[2i+1]`)
together are the 3N garbage lines. Default N = 4, the block size of the
16-bit adder.

## Carry-skip block (`ft_csa4`): where the skip goes

The block is the part to read closely. Its gates, 14 in all (8 MIG, 4 NFT,
2 F2G), with 15 constant inputs and 19 garbage outputs:

1. An F2G copies the block carry in `c0` three times: one copy goes to the
   ripple chain, one to the skip AND, and one is garbage `g[8]`.
2. A 4-bit ripple-carry adder produces `s`, the ripple carry `c4` and the
   propagate lines `p0..p3`.
3. Three NFT ANDs form P = (p0&p1)&(p2&p3). A fourth forms the skip term
   c0&P.
4. An output F2G takes (c4, c0&P, 0).

The published circuit labels one output of that last F2G "c4" but does not
say which one. Here the block carry out is the gate's pass-through output,
equal to `c4`. The alternative, the XOR output c4 ^ c0&P, is wrong whenever
all four bits propagate and c0 = 1. In that case the ripple carry already
equals c0, and the XOR cancels it. So the carry out, as a Boolean function,
is the ripple carry. The skip term is still computed, but it lands in
garbage: `g[17] = c4 ^ c0&P` and `g[18] = c4`, so `g[17]^g[18]` is the skip
term. The testbenches check it there.

A carry-skip adder is faster than a ripple-carry adder only through timing.
When a block propagates, its carry out can come straight from its carry in
instead of waiting for the ripple. This RTL has no delays, so that effect
cannot show. It also cannot be restored just by re-wiring this netlist:
doing so needs an OR of c4 with c0&P, and those two terms can both be 1,
which an F2G merge cannot handle. Treat the skip path here as the published
gate structure and cost, not as a timing model.

Garbage numbering `g[0..18]` follows the published 4-bit gate-level
drawing:

| lines | source |
|-------|--------|
| g[2i], g[2i+1] | full adder i: G1, G3 |
| g[8] | carry-in copy |
| g[9], g[10] | NFT forming p0&p1 |
| g[11], g[12] | NFT forming p0&p1&p2&p3 |
| g[13], g[14] | NFT forming p2&p3 |
| g[15], g[16] | skip NFT c0&P |
| g[17], g[18] | output F2G: c4^c0&P, c4 |

## 16-bit adder (`ft_hsa`)

Four `ft_csa4` blocks (parameter `NBLK`, default 4). The carry out of block
k drives the carry in of block k+1. Block k's garbage is at
`g[19k +: 19]`. Totals: 56 gates (32 MIG, 16 NFT, 8 F2G), 60 constant
inputs, 76 garbage outputs. The block size is fixed at four bits, because
the skip AND tree is drawn for four propagate lines.

## 2-bit carry look-ahead adder (`ft_cla2`)

This adder is offered as an alternative block. It computes the carries from
generate and propagate terms instead of from the full adders' carry
outputs:

    c1 = x0y0 ^ c0p0
    c2 = x1y1 ^ (x0y0 p1 ^ c0p0 p1)

Each ^ merges terms that are never both 1 (an F2G with third input 0). Each
product is an NFT AND. The netlist has 19 gates: 2 full adders (4 MIG), 10
F2G and 5 NFT. It has 26 constant inputs and 28 garbage outputs
`g[0..27]`. Seven of the ten F2Gs only make copies: of c0, x0, y0, x1, y1,
c0p0 and p1. This is the cost of having no fan-out, and it is why the
16-bit adder uses ripple-carry blocks instead. The full adders' own carry
outputs are unused (garbage `g[4]` and `g[17]`). They are still computed
correctly, and the testbench compares them with the look-ahead carries. The
per-line assignment of `g[]` is listed in the header of `rtl/ft_cla2.sv`.

## Top level (`ft_adder_top`)

`ft_hsa` and `ft_cla2` sit side by side and share no signals. HSA pins:
`x, y, c0, s, cout, g[75:0]`. CLA pins: `cla_x, cla_y, cla_c0, cla_s,
cla_c2, cla_g[27:0]`. Combining them behind one set of pins is a packaging
choice of this RTL. All logic is combinational. There is no clock, reset or
handshake. Constant inputs are tied to 0 inside the modules. `ftrev_pkg`
holds the shared sizes and the counts from the comparison table.

## Cost figures

The modules reproduce the published gate, constant-input and garbage counts:

| circuit | gates | constants | garbage |
|---------|-------|-----------|---------|
| FTFA | 2 MIG | 2 | 3 |
| 4-bit RCA | 8 MIG | 8 | 12 |
| 2-bit CLA | 4 MIG + 10 F2G + 5 NFT = 19 | 26 | 28 |
| 4-bit CSA | 8 MIG + 4 NFT + 2 F2G = 14 | 15 | 19 |
| 16-bit HSA | 32 MIG + 16 NFT + 8 F2G = 56 | 60 | 76 |

The published "hardware complexity" counts 2-input XOR, AND and NOT
operations, for example 6 XOR + 4 AND + 2 NOT for the full adder. A CMOS
synthesis of this RTL gives a different number, because it folds the
constant inputs away and drops unused logic. For the 16-bit adder the
published XOR count (320) is twice what four blocks give (4 x 40 = 160); the
AND and NOT counts are exactly four times the block's.

## Where this RTL departs from, or fills gaps in, the published circuits

- **NFT gate, Q output.** The gate's drawing prints Q = BC' ^ AC'. With that
  Q the gate is neither reversible nor parity preserving: for C = 0, P and Q
  are equal. The text, however, lists NFT as a parity-preserving gate. The
  RTL uses Q = B'C ^ AC', the gate's usual definition, which is both
  reversible and parity preserving. Q is garbage in every circuit, so sums
  and carries do not depend on this choice; only the parity check does.
  With the printed Q swapped in, the fault-injection test of the 4-bit
  block below fails about 19,000 of its 52,000 checks. Some of those are
  stuck lines that corrupt the sum while the parity still matches. The
  printed form does match the published NOT count; this form has one more
  NOT per gate.
- **Carry-skip output gate.** As explained above, the block carry out is
  the F2G pass-through output (`c4`). The skip term appears only in
  garbage.
- **Look-ahead gate count.** One sentence describes the 2-bit look-ahead
  adder as "5 NFTs, 10 F2Gs and 8 MIGs", which is 23 gates, not the stated 19.
  The RTL follows the comparison table and the drawing: 4 MIG (two full
  adders).
- **Illegible wiring.** Three details of the drawings could not be read and
  were chosen here: which first-MIG line feeds the fourth input of the
  second MIG in the full adder (A is used); which NFT pin takes the
  constant 0 (A, the only choice that gives an AND); and the order of the
  two garbage labels within one gate.
- **Garbage numbering.** The two drawings of the 4-bit block number the NFT
  garbage differently. The gate-level drawing is followed.
- The ripple-carry drawing labels its last sum s_n; it is s_(n-1).
- Not included: the IG gate and the IG-based full adder that the MIG
  versions improve on, the Fredkin-gate adders they are compared with, and
  the Feynman, Toffoli and Peres gates, which appear only as background.
  None of them is part of the proposed adders.
- No parity checker is built. The circuits make single faults detectable
  at their outputs, but comparing parities is left to whatever uses them.
  The testbenches do that comparison.

## Verification

Every module has a self-checking testbench in `tb/`. Each one ends with a
line `TB_RESULT checks=N failures=M`.

- `tb_mig_gate`, `tb_f2g_gate`, `tb_nft_gate`: all input vectors. Each
  output is checked against the equations, input parity against output
  parity, and all output vectors must be distinct (reversibility).
- `tb_ftfa`, `tb_ft_rca`, `tb_ft_csa4`, `tb_ft_cla2`: all input
  combinations. Checked: sum and carry against integer addition, output
  parity against input parity, and selected garbage lines (propagate
  lines, skip term, the unused ripple carries of the look-ahead adder).
- `tb_ft_hsa`: directed vectors plus 20,000 random ones. It checks the sum,
  the parity, and each block's skip term against the carry into that block
  computed arithmetically.
- `tb_ft_adder_top`: both adders at their default sizes, with directed and
  random vectors. It counts each mechanism and fails if one never occurred:
  a skip in every block, a carry rippling through all 16 bits, a carry out
  of the 16-bit adder, and the three look-ahead cases of the 2-bit adder.
  It also checks that flipping any single output line breaks the parity
  equality.

Two more testbenches test the fault-detection claim itself, with
single-line faults inside the circuit and not only on its outputs.
`tb_ft_csa4_faults` covers the 4-bit carry-skip block (26 internal lines)
and `tb_ft_cla2_faults` the 2-bit look-ahead adder (30 internal lines). For
every input vector, each test injects a fault on each internal line, using
`force` and `release` on hierarchical names. A line that is flipped must
always give an output parity mismatch. A line stuck at 0 or 1 must either
leave every output unchanged or give a mismatch. Both tests count how many
stuck-at faults corrupted the sum, and every one of those is caught. The
tests name internal nets by hierarchy, so renaming a wire inside
`ft_csa4`, `ft_rca`, `ftfa` or `ft_cla2` means editing the line lists
there.

Each testbench has been run against a deliberately broken copy of its
module and fails there.

To simulate with Verilator, for example the top level:

    verilator --binary --timing -Irtl -y rtl +libext+.sv \
        rtl/ftrev_pkg.sv tb/tb_ft_adder_top.sv --top-module tb_ft_adder_top
    ./obj_dir/Vtb_ft_adder_top

Substitute any other `tb/tb_*.sv` for the top-level testbench. Every
testbench runs in well under a second.
