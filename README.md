# 4-bit binary Ling adder

A carry-lookahead adder spends most of its depth on the carries. Huey Ling's
reformulation replaces the carry `c` by a *pseudo-carry* `H` that is one logic
level cheaper to build, and moves the missing level into the sum, where it
can be overlapped with other work. This RTL is a purely combinational 4-bit
adder built that way: `{cout, s} = a + b` for two unsigned 4-bit operands, with
no carry input, no clock and no reset.

## The idea in three equations

Per bit, with the *inclusive-OR* propagate:

    g_i = a_i & b_i        p_i = a_i | b_i        d_i = a_i ^ b_i

Let `c_i` be the carry *into* bit `i`. The Ling carry of bit `i` is

    H_i = g_i | c_i

Because `g_i` implies `p_i` when `p` is an OR, the ordinary carry out of bit
`i` is recovered with one AND: `c_{i+1} = p_i & H_i`. The gain is that
`H_i` has fewer and shorter product terms than `c_{i+1}`:

    c_{i+1} = g_i | p_i g_{i-1} | p_i p_{i-1} g_{i-2} | ...
    H_i     = g_i | g_{i-1}     | p_{i-1} g_{i-2}     | ...

Pairing adjacent bits gives the Ling generate and propagate,

    G*_i = g_i | g_{i-1}        P*_i = p_i & p_{i-1}

(with `g_{-1} = p_{-1} = 0`), and for four bits the Ling carries become

    H3 = G*3 | P*2 & G*1
    H2 = G*2 | P*1 & G*0
    H1 = G*1
    H0 = G*0

With two-input gates the deepest Ling carry, `H3`, is four levels from the
operands (bit cell, pair cell, AND, OR). The corresponding ordinary carry
`c4` needs a fifth level, and in this design that is exactly the carry out:
`cout = p3 & H3`.

## The sum cell: where the saved level goes

The sum of bit `i` is `s_i = d_i ^ c_i = d_i ^ (p_{i-1} & H_{i-1})`. Forming
the AND first would give back the level saved on the carry. Instead the sum
is split on `H_{i-1}`, the latest-arriving signal:

    s_i = ~H_{i-1} & d_i  |  H_{i-1} & (d_i ^ p_{i-1})

`d_i ^ p_{i-1}` is ready as soon as the bit cells are, so `H_{i-1}` only
steers a two-way choice. The second branch matters in the case
`H_{i-1} = 1, p_{i-1} = 0`: since `p_{i-1} = 0` forces `g_{i-1} = 0`, the
Ling carry is set only because a carry reached bit `i-1`, and with
`a_{i-1} = b_{i-1} = 0` that carry stops there. The branch then gives
`d_i ^ 0 = d_i`, as it must. Treating `H` as if it were the carry would be
wrong exactly here, and the end-to-end testbench counts that this case
occurs.

The published derivation writes the first term as `~H_{i-1} ^ d_i`. Read
literally that yields `~d_i` whenever `H_{i-1} = 0`, which is not a sum; this
design uses the AND form above, which is algebraically equal to
`d_i ^ (p_{i-1} & H_{i-1})`.

Bit 0 has no carry in, so its sum cell sees `H_{-1} = p_{-1} = 0` and gives
`s0 = d0`.

## Structure

Four stages, one module each, wired by `ling_adder4`:

| stage | module | count | computes |
|---|---|---|---|
| bit generation | `ling_bitgen` | 4 | `d_i, g_i, p_i` (as a `bitgen_t` struct) |
| Ling generate/propagate | `ling_gp` | 4 | `G*_i, P*_i`; bit 0 gets grounded neighbour inputs |
| Ling carry | `ling_carry` | 1 | `H3..H0` and `cout = p3 & H3` |
| sum | `ling_sum` | 4 | `s_i` from `d_i, p_{i-1}, H_{i-1}` |

`ling_pkg` holds the width (`WIDTH = 4`) and the `bitgen_t` type. The width
is a package constant rather than a module parameter on purpose: the Ling
carry equations are written out for four bits, and a wider adder would need
longer (or grouped) `H` expressions, not a different number. `P*0` and `P*3`
are produced by the pair cells but not used by the four-bit carry
equations; `H3` is used only for the carry out.

Synthesised with a generic flow the whole adder is 37 gates
(15 AND, 12 OR, 7 XOR, 3 NOT).

Ports of the top, `ling_adder4`:

| port | dir | width | meaning |
|---|---|---|---|
| `a` | in | 4 | operand A |
| `b` | in | 4 | operand B |
| `s` | out | 4 | sum, `(a + b) mod 16` |
| `cout` | out | 1 | carry out, `(a + b) >= 16` |

## How this RTL relates to the published adder

Taken from the published design: the three bit signals with an OR-type
propagate, the pair-wise Ling generate/propagate, the four `H` equations,
grounding of `g_{-1}` and `p_{-1}`, the sum computed from `d_i`, `p_{i-1}`
and `H_{i-1}`, and the four-stage organisation with a separate carry-out AND.

Choices and corrections of this RTL:

* **Sum expansion.** AND instead of the printed XOR in the first term (see
  above).
* **Carry-out index.** The publication writes the carry out as `H4 . p4`,
  while its carries run `H3..H0`; the carry leaving a four-bit adder is
  `H3 . p3`, which is what is built.
* **Star-less G and P.** The four `H` equations are printed with `G` and `P`
  without stars; they are read as the Ling terms `G*`, `P*`, and with that
  reading they give the true Ling carries (checked exhaustively).
* **No carry input, no registers.** Neither is described; the adder is a pure
  combinational block and `s0 = d0`.
* **Grouping.** The loose AND/OR gates that form `H2`, `H3` and the carry out
  are gathered into one module, and the bit signals travel as a struct.
* Not modelled: the discrete realisation of the same circuit on a two-layer
  board of 74xx gate packages with DIP-switch inputs, LED outputs and a 7805
  regulator. It adds no logic beyond `ling_adder4`.

The publication does not report measurements; its one quantitative claim
is the four-versus-five gate levels for `H` versus `c`, which the structure
above reproduces.

## Verification

Every module has a self-checking testbench in `tb/` whose expected values
come from integer arithmetic, not from the Ling equations:

* `tb_ling_bitgen` — all 4 input pairs; `d`, `g`, `p` from `a_i + b_i`.
* `tb_ling_gp` — all 16 input combinations.
* `tb_ling_carry` — all 256 operand pairs; `H_i` checked against
  `g_i | c_i` with `c_i` taken from the sum of the low `i` bits, `cout`
  against bit 4 of `a + b`.
* `tb_ling_sum` — all 8 input combinations.
* `tb_ling_adder4` — the whole adder at its default configuration, all 256
  operand pairs against `a + b`. It also counts, from the operands, how often
  a carry out occurred (120), `H3` was set only by `P*2 & G*1` (36), `H2` only
  by `P*1 & G*0` (24), a sum bit had a real carry in (272), and a sum bit saw
  `H = 1` without a carry (40); a mechanism that never occurs is a failure.

Each testbench ends with a line `TB_RESULT checks=N failures=M` and has a
watchdog. Since the design is combinational, results are sampled one time
unit after the inputs change.

## Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing -Irtl -Itb rtl/ling_pkg.sv \
        tb/tb_ling_adder4.sv --top-module tb_ling_adder4
    ./obj_dir/Vtb_ling_adder4

Replace `tb_ling_adder4` by any other testbench name to test a single stage.
Lint a module with `verilator --lint-only -Wall -Irtl rtl/ling_pkg.sv
rtl/<module>.sv`; the remaining warnings are the unused `P*0`, `P*3` and
the `H3` bit noted above.
