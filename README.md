# Improved carry increment adder (CIA with carry look-ahead groups)

A carry increment adder avoids waiting for a carry to ripple across the whole
word. The operands are split into 4-bit groups. Every group above the lowest
is added once, on the assumption that its carry-in is 0. Only later, when the
real carry from the group below arrives, is that partial sum corrected. The
correction is a plain "+1", done by a short chain of half adders. A carry
select adder would instead form two sums per group and pick one with a
multiplexer. The increment replaces that second adder and the multiplexer.

In a classic carry increment adder each group is a ripple carry adder. In this
design each group is a 4-bit **carry look-ahead adder (CLA)**. The rest of
the structure is unchanged. The group adders all work in parallel, so the
critical path becomes one CLA, then the half-adder chain, then an OR gate.
The delay of a ripple group no longer counts.

The RTL here is the 8-bit adder, the size the design was presented at. It can
be parameterised to any multiple of 4 bits.

## Structure of the 8-bit adder

```
 a[3:0] b[3:0] cin                a[7:4] b[7:4]  0
      |    |    |                      |    |    |
   +--------------+                +--------------+
   |  CLA (low)   |                |  CLA (high)  |
   +--------------+                +--------------+
     |        |                      |          |
   s[3:0]    co_lo -----+          psum[3:0]   co_hi
                        |            |            |
                     +------------------+         |
                     | HA chain (+cin)  |         |
                     | HA1 HA2 HA3 HA4  |         |
                     +------------------+         |
                        |         |               |
                      s[7:4]    co_inc ---OR--- co_hi
                                          |
                                         cout
```

* **Low CLA** (`cla`): adds `a[3:0] + b[3:0] + cin`. Its sum is the final
  `s[3:0]`. No correction is needed, because it already sees the true carry.
* **High CLA** (`cla`): adds `a[7:4] + b[7:4]` with its carry-in tied to 0.
  It runs at the same time as the low CLA.
* **Incrementer** (`incrementer`): four `half_adder` cells in a ripple chain.
  HA1 adds the low CLA's carry `co_lo` to `psum[0]`. Each later cell adds the
  previous cell's carry to the next bit. The four sums are `s[7:4]`.
* **OR gate**: `cout = co_hi | co_inc`.

### Why the carry out is an OR

There are two ways the upper group can carry out. Either the high CLA itself
overflowed (`co_hi`), or its partial sum was `1111` and the increment pushed it
over (`co_inc`). The two never happen together. If `co_hi = 1`, then
`a[7:4] + b[7:4]` is at least 16. Its low four bits, `psum`, are then at most
`15 + 15 - 16 = 14`, so `psum` cannot be `1111`. Since the two carries are
never both 1, an OR gives the same result as a sum. The exhaustive testbench
checks this claim on every input.

### Look-ahead inside a group

The paper gives only the function of the group adder. The insides here are
the textbook form. Each bit has a generate `g = a & b` and a propagate
`p = a ^ b`. Every carry is a flat sum of products:

```
c1 = g0 | p0·cin
c2 = g1 | p1·g0 | p1·p0·cin
c3 = g2 | p2·g1 | p2·p1·g0 | p2·p1·p0·cin
c4 = g3 | p3·g2 | p3·p2·g1 | p3·p2·p1·g0 | p3·p2·p1·p0·cin
sum[i] = p[i] ^ c[i]
```

`cla.sv` builds these terms with nested loops, so the same code covers any
group width `W`. Synthesis sees two-level AND/OR logic, not a ripple.

### Wider adders

`cia_cla` takes the parameters `WIDTH` (default 8) and `GROUP` (default 4).
`WIDTH` must be a multiple of `GROUP` and give at least two groups; an
elaboration-time assertion enforces this. Beyond 8 bits, every extra group
repeats the upper-group structure: a CLA with carry-in 0, an incrementer, and
an OR. Each group's corrected carry feeds the next group's incrementer. The
group carries therefore ripple one stage per group. That is the ordinary
carry-increment behaviour. The paper shows only the 8-bit case; this
extension is this RTL's own choice.

## Files

| File | Contents |
|---|---|
| `rtl/cia_pkg.sv` | Package with the default sizes `CIA_WIDTH = 8`, `CIA_GROUP = 4` |
| `rtl/half_adder.sv` | One-bit half adder |
| `rtl/cla.sv` | `W`-bit carry look-ahead adder (default 4) |
| `rtl/incrementer.sv` | `W`-bit half-adder incrementer (default 4) |
| `rtl/cia_cla.sv` | Top: the carry increment adder |
| `tb/half_adder_tb.sv` | Exhaustive test, 4 cases |
| `tb/cla_tb.sv` | Exhaustive test, 512 cases |
| `tb/incrementer_tb.sv` | Exhaustive test, 32 cases |
| `tb/cia_cla_tb.sv` | Exhaustive test of the 8-bit top at default parameters, 131072 cases |
| `tb/cia_cla_wide_tb.sv` | 16-bit build, corner cases plus 200000 random operand pairs |

All of it is combinational. There is no clock, no reset and no register. Top
ports: `a[WIDTH-1:0]`, `b[WIDTH-1:0]`, `cin`, `s[WIDTH-1:0]`, `cout`.

## Verification

Each testbench compares the outputs with integer arithmetic done in the
testbench, and ends by printing `TB_RESULT checks=N failures=M`.

`cia_cla_tb` covers every 8-bit operand pair with both carry-in values. It
also checks the waveform values published for the design: `1D + 16 = 33`,
`94 + A9 = 13D` and `94 + A9 + 1 = 13E`. For each internal mechanism, it
counts how often the operands force it to act, and it fails if any count is
zero:

* the upper partial sum is incremented (low group carries out);
* the increment ripples out of HA4 and so drives `cout`;
* the high CLA produces `cout` by itself;
* `cin` alone decides the low group's carry.

Each block's test was also run against a deliberately broken copy of the
block, to confirm that it catches a real fault. The faults were: an OR in
place of the AND in the half adder's carry; the carry-in term dropped from
the look-ahead equations; the incrementer's carry taken one stage early; and
the final OR removed. Every broken copy failed its test.

To simulate with Verilator, for example the top:

```
verilator --binary --timing --assert -y rtl +libext+.sv rtl/cia_pkg.sv \
  tb/cia_cla_tb.sv --top-module cia_cla_tb -o sim
./obj_dir/sim
```

Swap in another file from `tb/` the same way. Every testbench finishes in
well under a second.

## Where this RTL departs from, or goes beyond, the published design

* **Carry-in ports.** The block diagram ties the upper CLA's carry-in to 0.
  The published waveform and schematic, however, show the top with two carry
  inputs, `cin` and `cin1`; the second is held at 0 throughout. This RTL
  follows the block diagram. It has one carry input, `cin`, into the low CLA.
  The upper CLA's carry-in is tied to 0 inside. Driving that input with 1
  would add the carry twice.
* **CLA internals** are the standard generate/propagate form. The design
  states only that each group is a 4-bit carry look-ahead adder.
* **Half-adder chain.** The block diagram draws HA1 to HA4 without the lines
  between them. The ripple order used here (HA1 on bit 4 up to HA4 on bit 7,
  with HA4's carry into the OR) is the one the description of a half-adder
  ripple chain implies. It is also the only order that gives a correct sum.
* **Widths above 8 bits** are an extension; see "Wider adders".
* **Published timing and area figures are not reproduced.** On an FPGA, the
  design was reported at 13.54 ns, 19 LUTs and 41 mW, against 14.59 ns and 20
  LUTs for the ripple-group version. Those numbers depend on the device and
  the tools. They cannot be checked in an RTL simulation, which has no
  delays. The ripple-group baseline is not part of this RTL.
