# 4 x 4 full-Dadda multiplier built from half-adder carry-select cells

A parallel multiplier works in three steps: AND gates form the partial
products, a tree of 3:2 and 2:2 counters reduces them to two rows, and one
carry-propagate adder adds those rows. This design keeps that structure, with
two twists:

* the reduction tree follows the **full-Dadda** pattern, which puts full adders
  in the early stages where a classic Dadda tree would use half adders. The
  result is a more regular tree with fewer wires;
* every full adder in the tree is an **HA-CSA-BEC1 cell**. This is a one-bit
  carry-select adder made of a half adder, a 2-bit "+1" (binary to excess-1)
  converter and two 2:1 multiplexers. Operands A and B get both possible
  answers ready in advance. The carry in only picks one of them, so a carry
  that arrives late costs just one multiplexer delay.

The RTL is combinational: no clock, no reset and no registers. The product is
valid one settling time after the operands change.

## The HA-CSA-BEC1 cell (`ha_csa_bec1_cell`)

The cell computes `{cout, sum} = a + b + cin` in three steps:

| step | block        | computes                                   | meaning               |
|------|--------------|--------------------------------------------|-----------------------|
| 1    | `half_adder` | `s = a ^ b`, `c = a & b`                   | result if `cin = 0`   |
| 2    | `bec1`       | `s1 = ~s`, `c1 = c ^ s`                    | `{c,s} + 1`: result if `cin = 1` |
| 3    | 2 x `mux2`   | `sum = cin ? s1 : s`, `cout = cin ? c1 : c` | pick by the real carry |

A half adder never outputs `{1,1}`, so the 2-bit increment in step 2 never
overflows. For `cin = 1` the carry out is `(a & b) ^ (a ^ b)`, which equals `a | b`.

None of the gates in steps 1 and 2 depend on `cin`. Only the select lines of
the two muxes do. That is why the multiplier wires a signal that comes out of
another adder (and so arrives late) to `cin` wherever it can, and wires AND
outputs (which arrive early) to `a` and `b`.

In the original circuit each mux is a two-transistor pass-transistor gate. In
this RTL `mux2` is ordinary logic with the same truth table.

## The multi-bit HA-CSA-BEC1 adder (`ha_csa_bec1_adder`)

Put `WIDTH` cells side by side and connect the carry out of bit *i* to the
carry in of bit *i+1*, and you have a word adder. The half adders and
converters of all bits have no links between them and work in parallel. The
carry then ripples through the mux stage only: each bit's carry out is a mux
output that drives the next bit's select line. At the default `WIDTH = 4` the
adder has 4 half adders and 8 muxes.

The same module, at `WIDTH = 6` with `cin = 0`, is the multiplier's final
carry-propagate adder (see below).

## The 4 x 4 multiplier (`full_dadda_multiplier`)

Below, `AiBj` stands for `a[i] & b[j]`, whose weight is `i + j`. In the RTL it
is `pp[j][i]`, produced by `pp_generator`. The tree has two stages.

**Stage 1 (height 4 -> 3).** Two HA-CSA-BEC1 cells, on the two tallest columns:

| instance  | a    | b    | cin  | sum (weight) | carry (weight) |
|-----------|------|------|------|--------------|----------------|
| `cell_s1` | A2B1 | A1B2 | A0B3 | S1 (3)       | C1 (4)         |
| `cell_s3` | A3B1 | A2B2 | A1B3 | S3 (4)       | C3 (5)         |

**Stage 2 (height 3 -> 2).** Three half adders and one cell:

| instance  | inputs               | sum (weight) | carry (weight) |
|-----------|----------------------|--------------|----------------|
| `ha_s0`   | A1B1, A0B2           | S0 (2)       | C0 (3)         |
| `ha_s2`   | S1, C0               | S2 (3)       | C2 (4)         |
| `ha_s4`   | S3, C1               | S4 (4)       | C4 (5)         |
| `cell_s5` | a=A3B2, b=A2B3, cin=C3 | S5 (5)     | C5 (6)         |

`cell_s5` shows the point of the cell. Its `a` and `b` come straight from AND
gates, but `C3` has to pass through `cell_s3` first. Putting `C3` on `cin`
hides that extra delay.

**Final adder.** What is left is `A0B0` at weight 0 (this is `p[0]`) and two
6-bit rows covering weights 1 to 6:

```
weight   6     5     4     3     2     1
row x   A3B3   S5    S4    S2   A2B0  A1B0
row y   C5     C4    C2   A3B0   S0   A0B1
```

The HA-CSA-BEC1 adder adds them: `p[7:1] = {cout, x + y}`.

### Component counts

For an M-bit multiplier of this kind, the `dadda_pkg` functions give:

| item                       | formula         | M = 4 |
|----------------------------|-----------------|-------|
| HA-CSA-BEC1 cells          | (M-1)(M-3)      | 3     |
| half adders                | M-1             | 3     |
| AND gates                  | M^2             | 16    |
| 2:1 muxes in the tree      | 2(M-1)(M-3)     | 6     |
| final adder width          | 2(M-1)          | 6     |

The mux count covers the reduction tree only. The final adder, built here from
the same cells, adds 12 more muxes.

## Where this RTL departs from, or adds to, the source design

* **Partial product A3B0.** The published 4-bit block diagram draws only 15 of
  the 16 partial products: A3B0 is missing. Here it goes straight into the
  final adder at weight 3. That is the only free slot in the two 6-bit rows,
  and without it the 64 products with `a[3] = b[0] = 1` would be wrong.
* **Final adder.** The source calls the final adder an "improved ripple-carry
  adder" taken from elsewhere and does not describe its insides. This RTL uses
  the HA-CSA-BEC1 word adder for it. That adder is also a ripple adder, except
  that its carry ripples through muxes.
* **Final adder width.** The source's printed formula for the final adder width
  is 2(M-2), which gives 4 for M = 4. Its block diagram and dot diagrams give
  6 bits for M = 4 and 10 bits for M = 6. Those match 2(M-1), which is what
  `dadda_pkg::cpa_width` uses.
* **Which input is the carry in.** In the two stage-1 cells, all three inputs
  are AND outputs. The source does not say which of them is the carry in, and
  this RTL puts the third product listed on `cin`. For `cell_s5`, the late
  carry `C3` goes on `cin`, as the source intends.
* **Fixed width.** The tree is wired by hand for 4 bits, the size at which the
  design is drawn and characterised. The source gives the component counts for
  any M and shows an 8-bit layout, but it gives the wiring of the tree only for
  4 bits. There is no 8-bit version here.
* **Unsigned operands.** Signed multiplication is not addressed.
* **Not modelled.** The following are circuit-level matters outside RTL:
  pass-transistor signal levels, transistor counts (24 per cell, 338 for the
  multiplier), delays (about 14 ps per cell and 75-123 ps for the multiplier,
  depending on process) and power.

## Files

| file | content |
|------|---------|
| `rtl/dadda_pkg.sv` | operand width, `cs_t` {carry, sum} pair, component-count functions |
| `rtl/half_adder.sv` | half adder |
| `rtl/bec1.sv` | 2-bit binary to excess-1 converter |
| `rtl/mux2.sv` | 2:1 mux |
| `rtl/ha_csa_bec1_cell.sv` | one-bit HA-CSA-BEC1 cell |
| `rtl/ha_csa_bec1_adder.sv` | WIDTH-bit HA-CSA-BEC1 adder (default 4; 6 as final adder) |
| `rtl/pp_generator.sv` | WIDTH x WIDTH AND array |
| `rtl/full_dadda_multiplier.sv` | top: 4 x 4 multiplier |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_cpa` for the 6-bit final adder |

Module hierarchy:

```
full_dadda_multiplier
  pp_generator
  ha_csa_bec1_cell x3     (half_adder, bec1, mux2 x2 each)
  half_adder x3
  ha_csa_bec1_adder #(6)  (ha_csa_bec1_cell x6)
```

## Simulating

Each testbench is a top-level module with no ports. Build it with the package
first, and let verilator find the other modules in `rtl/`:

```
verilator --binary --timing -Irtl rtl/dadda_pkg.sv tb/tb_full_dadda_multiplier.sv \
          --top-module tb_full_dadda_multiplier
./obj_dir/Vtb_full_dadda_multiplier
```

Swap in any other `tb/tb_<name>.sv` to test a single module. Every testbench
prints one line, `TB_RESULT checks=N failures=M`, and finishes. A time-based
watchdog ends the run with a failure if it hangs.

What the tests cover:

* all cells and the 4-bit and 6-bit adders are tested exhaustively (every
  input combination);
* the multiplier is run over all 256 operand pairs. For each pair the test
  checks the product, and also checks that the two rows entering the final
  adder already add up to `a * b`;
* the multiplier test counts how often each cell took its `cin = 0` path and
  its `cin = 1` (excess-1) path, how often the late carry `C3` was 1, and how
  often the final adder carried out. Each of these must happen at least once;
* the multiplier test also checks the component-count functions against the
  4-bit netlist.

## Changing it

* To change a gate-level detail, such as how the carry is selected, edit
  `ha_csa_bec1_cell`. Every cell in the tree and in the final adder picks it up.
* To use a different final adder, replace the `u_cpa` instance in
  `full_dadda_multiplier`. Its ports are two 6-bit rows in, and a 6-bit sum
  plus a carry out.
* A wider multiplier needs a new reduction tree. The `dadda_pkg` counts tell
  you how many cells and half adders it should contain, and the wider tree can
  reuse `pp_generator`, `ha_csa_bec1_cell`, `half_adder` and
  `ha_csa_bec1_adder` unchanged.
