# 8-bit Wallace-tree multiplier and multiply-add unit

A Wallace-tree multiplier does long multiplication in parallel. The N×N
partial products (each an AND of one multiplicand bit and one multiplier bit)
form N shifted rows. Layers of full and half adders then cut the number of
rows by about a third per layer, without ever propagating a carry along a row,
until only two rows are left. One ordinary adder then adds those two rows.
The depth of the reduction grows with log(N), not with N as in an array
multiplier.

This RTL implements the 8×8 unsigned design described in the report
"Implementation of a 8-bit Wallace Tree Multiplier" (a 45 nm full-custom
class project). The circuit-level work in that report (transistor sizing, a
transmission-gate XOR, layout, energy and delay measurements) has no
counterpart here. What is reproduced is the logic: the same blocks, the same
reduction schedule and the same final adder. The report also has a
multiply-add extension, s = a·b + c, which is included as the top level.

Everything is combinational. There is no clock, no reset, no register and
no handshake. An output is valid one propagation delay after the inputs
change.

## Block structure

```
                 wallace_mac  (top: s = a*b + c)
                 ├── wallace_multiplier  (prod = a*b)
                 │   ├── pp_gen           8x8 AND array -> 64 partial products
                 │   ├── wallace_tree     align rows, 4 reduction stages
                 │   │   └── wallace_stage x4   (S1..S4: full_adder / half_adder)
                 │   ├── rca (W = 11)     final adder over columns 5..15
                 │   └── concatenation    columns 0..4 taken straight from the tree
                 └── rca (W = 17)         accumulator adder
```

`full_adder` is two `half_adder`s plus an OR gate, as in the original
schematic. The first half adder forms `a_xor_b` and carry `ca`. The second
adds `c_in`, giving `s` and carry `cb`. Then `c = ca | cb`. `half_adder` is
one XOR and one AND. The multiplier's ports are `a`, `b` and `prod`. The
original timing report calls them A<7:0>, B<7:0> and prod<15:0>.

## The reduction schedule

This is the part that needs the most care. The rule is the classic row-wise
Wallace rule:

* take the rows from the top in groups of three;
* inside a group, a column with three bits gets a full adder, a column with
  two bits gets a half adder, and a single bit is copied;
* each adder puts its sum in the group's *sum row*, in the same column, and
  its carry in the group's *carry row*, one column to the left;
* rows that do not fill a group of three go to the next stage unchanged.

So r rows become 2⌊r/3⌋ + (r mod 3) rows. For N = 8 that is
8 → 6 → 4 → 3 → 2, which means four stages. Each row stays a contiguous range
of columns. Bits outside a row's range are constant 0 in the RTL and feed no
adder. For N = 8 the shapes are:

| stage | rows in | column ranges of the output rows           | FA | HA |
|-------|---------|--------------------------------------------|----|----|
| S1    | 8 (row i: i..i+7) | 0–9, 2–9, 3–12, 5–12, 6–13, 7–14 | 12 | 4  |
| S2    | 6       | 0–12, 3–10, 5–14, 7–14                     | 13 | 3  |
| S3    | 4       | 0–14, 4–13, 7–14                           | 6  | 4  |
| S4    | 3       | 0–14 (`reduce_out_a`), 5–15 (`reduce_out_b`) | 7 | 4 |
| total |         |                                            | 38 | 15 |

After S4, columns 0–4 hold one bit each. Those bits are already product bits
0–4. Columns 5–15 hold two bits, and an 11-bit ripple-carry adder sums them
(carry in 0). The adder's output is concatenated above bits 0–4. The carry
out of the adder is always 0, because 255·255 = 65025 fits in 16 bits. An
immediate assertion in `wallace_multiplier` checks this. The longest path is
one AND, four full adders in the tree and eleven in the ripple adder.

The schedule is not written out by hand in the RTL. `wallace_pkg` holds
constant functions that replay the rule: `rows_at`, `num_stages`, `row_edge`
(a row's lowest or highest column), `cells_in_stage` and `max_column`.
`wallace_stage` uses them to decide, column by column, where to place a full
adder, a half adder or a wire. The tree is therefore generic in `N`.
`wallace_multiplier` sizes its final adder from the lowest column of the last
carry row. Elaboration stops with an error if a shape assumption fails, for
example a carry that would leave the 2N-bit product. The multiplier
testbench also runs N = 3, 4 and 16 to exercise this.

## Multiply-add unit

`wallace_mac` adds the 16-bit product, zero-extended, to a 17-bit addend `c`
in a 17-bit ripple-carry adder. The adder's carry out becomes bit 17 of the
result `s`, so `s` cannot overflow: the maximum is 255·255 + 131071 = 196096
< 2¹⁸. The product is also available on `prod`. As in the original there is
no register feeding `s` back into `c`. Turning this into an accumulator
(c ← a·b + c) needs an external register.

## Where this RTL departs from, or fills in, the original

* **Stage S3 and final-adder cell counts.** The original gate table lists
  8 FA for S3 and 12 FA for the final adder. Its text gives 38 FA and 15 HA
  for the whole tree, and 11 FA for the final adder. The row-wise rule
  produces the text's numbers, so those are what is built. S1, S2 and S4
  agree with the table.
* **Output width.** The original simulation plots show a 17-bit bus
  s<16:0> for the product. Its timing report and its own argument that the
  top column cannot carry give 16 bits. `prod` is 16 bits.
* **Accumulator width.** The original calls the multiply-add "16 bit".
  Its MAC plots show c<16:0> and s<17:0>, and its gate table gives the
  accumulator 17 full adders. The 17/18-bit version is built (`C_W = 17`).
* **Enable.** The original plots show an "enable" signal whose function is
  never described, and no gate is counted for it. It is not built.
* **Operand roles.** Row i of the partial products is `a` gated by `b[i]`.
  The original does not say which operand indexes the rows. Because
  multiplication is symmetric, this does not change any result.
* **Not built.** These appear in the original only as explored alternatives,
  not as the final design:
  - an inverted-logic (NAND/XNOR) variant of the adders;
  - 5-3 "complex adder" compressors;
  - a carry-select final adder;
  - a half adder in place of the final adder's LSB full adder.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_half_adder`, `tb_full_adder` | all input combinations |
| `tb_pp_gen` | all 65536 operand pairs, bit by bit and as a weighted sum |
| `tb_rca` | W = 11 and W = 17, random vectors and full-length carry ripples |
| `tb_wallace_stage` | S1–S4 driven separately with random bits inside hand-written row shapes. Each stage must preserve the weighted sum, keep bits outside the expected shapes at 0, and use the FA/HA counts in the table above |
| `tb_wallace_tree` | all 65536 pairs: the two output rows sum to a·b and have the expected shape |
| `tb_wallace_multiplier` | all 65536 pairs at N = 8, including the original's cases 0×255, 1×1, 27×31 = 837 and the worst-case 255×255 = 65025; exhaustive at N = 3 and 4; random at N = 16 |
| `tb_wallace_mac` | default parameters: the original's cases 111×223 + 14191 = 38944 and 255×255 + 65535, every operand pair with a random addend, plus counters showing that the top product bit, the addend's top bit, the carry into s[17] and a 17-bit carry ripple each occurred |

All of them finish in well under a second. With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/wallace_pkg.sv tb/tb_wallace_mac.sv --top-module tb_wallace_mac
./obj_dir/Vtb_wallace_mac
```

Put `rtl/wallace_pkg.sv` first on any command line; the other files are
found through `-Irtl`. The RTL lints cleanly with `verilator --lint-only -Wall`.
The only message is an unused-bits warning for the low five bits of
`reduce_out_b`, which are constant 0 by construction.

## Changing the design

* `N` (default 8) on `wallace_multiplier`/`wallace_mac` sets the operand
  width. The tree, the number of stages and the final-adder width all follow
  from it. `C_W` must be at least 2N.
* To register the design, wrap `wallace_mac` in flip-flops. The
  combinational depth is the figure given above.
* To try a different reduction rule, change the two places that encode it:
  the carry-row computation in `wallace_pkg::row_edge` and the per-column
  cell choice in `wallace_stage`.
