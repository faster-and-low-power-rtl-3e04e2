# Twin precision multiplier with a BEC final adder and clock-gated sub-multipliers

An N x N unsigned multiplier is built from four N/2 x N/2 multipliers that
run side by side. Splitting the work this way does two things. The four
partial-product trees are each only half as tall as one N x N tree, so the
reduction is shallower. And each quarter can be switched off on its own, so
the same hardware can also deliver one or two half-width products while the
idle quarters draw no switching power. Here "switched off" means that the
clocks of a quarter's operand registers are stopped. The operands are not
forced to zero. The multiplier then holds its last inputs and its logic does
not toggle.

The published design this RTL follows was evaluated at N = 16 and N = 32.
The RTL is parameterised by `N` and defaults to 32.

## The arithmetic

Write the operands in halves, with H = N/2:

    inp1 = aH * 2^H + aL        inp2 = bH * 2^H + bL

The four sub-multipliers form

| Sub-multiplier | Operands                  | Product (N bits) |
|----------------|---------------------------|------------------|
| M1             | inp1[H-1:0], inp2[H-1:0]  | P1 = aL * bL     |
| M2             | inp1[H-1:0], inp2[N-1:H]  | P2 = aL * bH     |
| M3             | inp1[N-1:H], inp2[H-1:0]  | P3 = aH * bL     |
| M4             | inp1[N-1:H], inp2[N-1:H]  | P4 = aH * bH     |

and the product is `P4 * 2^N + (P2 + P3) * 2^H + P1`. In the partial-product
array, M1 and M4 take the two triangles at the low and high ends. M2 and M3
take the two blocks in the middle whose columns overlap.

## Recombining the four products (`mbec_adder`)

The recombination is the hardest part of the design to read, so here it is
bit by bit. For N = 8 (H = 4), the bits line up as follows (most significant
bit on the left):

    P4[7] P4[6] P4[5] | P4[4] P4[3] P4[2] P4[1] P4[0] P1[7] P1[6] P1[5] P1[4] | P1[3..0]
                      |   PS[8] PS[7] ...                             PS[0]   |
      top N/2-1 bits  |             N+1 bits, added by a ripple adder         | passed through

Here `PS = P2 + P3` is the N+1-bit result of an N-bit ripple carry adder.
The adder works in three zones:

1. **Low H bits.** `P[H-1:0] = P1[H-1:0]`. Nothing else lands on these
   bits.
2. **Middle N+1 bits.** An (N+1)-bit ripple carry adder adds
   `{P4[H:0], P1[N-1:H]}` to `PS` and gives `P[N+H:H]` plus a carry out.
3. **Top H-1 bits.** `P4[N-1:H+1]` meets no other operand, only that carry.
   Both possible results are therefore ready long before the carry
   arrives: the bits themselves, and the bits plus one. A multiplexer,
   driven by the carry, picks one.

The "plus one" is made by a Binary to Excess-1 Converter (`bec`), not by an
adder with its carry input tied to 1. Output bit 0 is the inverse of input
bit 0. Each higher output bit i is input bit i, inverted when all lower
input bits are 1. The all-ones test is an AND chain that grows by one bit
per position. This makes the top of the final adder a carry-select stage
that costs only an incrementer and a multiplexer. The rest of the final
addition is plain ripple carry. The BEC's result wraps around for an
all-ones input. That never matters, because a carry into an all-ones top
field would mean a product of 2^(2N) or more.

## Precision modes and clock gating

A 2-bit mode input `twin` selects what runs. A small decoder turns the mode
into three enables, and each enable gates the clock of one group of operand
registers:

| twin | Mode                   | T1 (M1) | T2 (M2, M3) | T3 (M4) | Result in `res`                                      |
|------|------------------------|---------|-------------|---------|------------------------------------------------------|
| 00   | twin precision         | 1       | 0           | 1       | `res[N-1:0] = aL*bL`, `res[2N-1:N] = aH*bH`          |
| 01   | M1 alone               | 1       | 0           | 0       | `res[N-1:0] = aL*bL`                                 |
| 10   | M4 alone               | 0       | 0           | 1       | `res[2N-1:N] = aH*bH`                                |
| 11   | full precision         | 1       | 1           | 1       | `res = inp1 * inp2`                                  |

In mode 00, one instruction delivers two independent H x H products. In
modes 01 and 10, a single H x H product is computed by one quarter. The
other half of `res` then shows the product of the operands that the other
quarter last loaded, and should be ignored.

Each operand register is H bits wide, and there are two per sub-multiplier
(eight in all). They replace the usual pair of N-bit input registers, so
each quarter's operands can be frozen on their own.

In the low-precision modes, the held M2 and M3 products must not reach the
sum. This design keeps a one-bit flag, clocked every cycle, that records
whether M2 and M3 were loaded in the last cycle. When they were not, their
products are replaced by zero in front of the N-bit adder. The result is
then exactly `{P4, P1}`. The published description does not say how this is
done, so this is a choice of this design.

Each clock gate (`clock_gate`) is an AND of the clock and the enable, with a
latch in front. The latch is transparent while the clock is low, so an
enable that changes while the clock is high cannot cut a pulse short or
create one. This latch is intended. It is the only latch in the design, and
synthesis reports one latch bit per gate.

## Interface and timing (`twin_mult`)

| Port    | Dir | Width | Meaning                                              |
|---------|-----|-------|------------------------------------------------------|
| `clk`   | in  | 1     | clock                                                |
| `rst_n` | in  | 1     | asynchronous reset, active low, clears all registers |
| `twin`  | in  | 2     | mode, type `twin_pkg::mode_e`                        |
| `inp1`  | in  | N     | operand a                                            |
| `inp2`  | in  | N     | operand b                                            |
| `res`   | out | 2N    | product register                                     |

`inp1`, `inp2` and `twin` are sampled on a rising edge of `clk`. Their
result appears in `res` after the following rising edge. The latency is one
cycle, and a new operation can start every cycle. Everything between the
operand registers and the output register is combinational: four
sub-multipliers, then the recombination adder.

## Inside a sub-multiplier (`half_mult`, `hpm_tree`, `rca`)

Each sub-multiplier is a conventional column-compression multiplier in three
parts:

- **Partial products.** An AND gate per bit pair forms
  `pp[i][j] = a[i] & b[j]`.
- **Reduction tree (`hpm_tree`).** The tree reduces the partial products to
  two rows.
- **Final adder.** A 2H-bit ripple carry adder adds the two rows.

The design this RTL follows uses the HPM reduction tree, a full-adder tree
with logarithmic depth and regular wiring, published separately. That
wiring is not reproduced here. `hpm_tree` is a tree of the same family built
by a simple greedy rule:

- At each level, the bits of every column are taken three at a time into
  full adders.
- A leftover pair goes into a half adder, and a single leftover bit passes
  straight through.
- Sums stay in their column, and carries move one column to the left.
- Levels are added until no column has more than two bits.

The height of every column at every level is worked out by a constant
function at elaboration. The tree is pure wiring, with 6 levels for H = 16
and 4 for H = 8. It computes the right function with the same kind of
depth, but its gate count and timing are not those of a true HPM tree.

## Files

| File                | Contents                                                              |
|---------------------|-----------------------------------------------------------------------|
| `rtl/twin_pkg.sv`   | mode enum `mode_e`, enable struct `gate_en_t`, `DEFAULT_N`             |
| `rtl/twin_mult.sv`  | top level                                                             |
| `rtl/mode_decoder.sv` | mode to clock enables                                               |
| `rtl/clock_gate.sv` | latch plus AND clock gate                                             |
| `rtl/half_reg.sv`   | H-bit operand register on a gated clock                               |
| `rtl/out_reg.sv`    | 2N-bit result register                                                |
| `rtl/half_mult.sv`  | H x H sub-multiplier                                                  |
| `rtl/hpm_tree.sv`   | column compression tree                                               |
| `rtl/rca.sv`, `rtl/full_adder.sv` | ripple carry adder and its cell                         |
| `rtl/bec.sv`        | Binary to Excess-1 Converter                                          |
| `rtl/mbec_adder.sv` | recombination of P1..P4                                               |

## Simulating

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=<n> failures=<n>`. To build and run one with Verilator 5,
from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal --top-module twin_mult_tb \
        -y rtl -y tb +libext+.sv rtl/twin_pkg.sv tb/twin_mult_tb.sv
    ./obj_dir/Vtwin_mult_tb

The testbenches are:

- **`twin_mult_tb`** runs the full design at the default N = 32. It runs
  15,000 operations in each mode, with long runs of one mode mixed with
  random mode changes, and one asynchronous reset mid-run. A reference
  model tracks what each sub-multiplier holds and predicts `res` for every
  cycle. This checks the one-cycle latency as well as the values, including
  the held half in the single-multiplier modes. The test also counts each
  mode, the mode switches, the cycles where the BEC path is selected, the
  held-half checks and the reset, and fails if any of them never happens.
- **`twin_mult_n16_tb`** is the same test on the 16-bit version (N = 16,
  8 x 8 quarters), with 10,000 operations per mode.
- **One testbench per block.** Each is exhaustive where the input space is
  small: the 4-bit adder, the 5-bit and 15-bit BEC, and the 4-bit and 8-bit
  trees. Otherwise it uses random and corner-case inputs. `clock_gate_tb`
  changes the enable during the high clock phase and checks that no pulse
  is cut or added.

`mbec_adder_tb` runs the adder at N = 8 and N = 16. Built on its own at
N = 32, the C++ that Verilator generates for its 65-stage carry chain made
the compiler run for longer than 10 minutes. The N = 32 adder is still fully
exercised inside `twin_mult_tb`.

## Changing the design

`N` is the only size parameter of the top. It must be even and at least 4,
because the BEC is N/2-1 bits wide. `hpm_tree` sizes itself from its `M`
parameter. The mode encoding and the mapping of enables to quarters live in
`twin_pkg` and `mode_decoder`.

## Where this RTL departs from, or adds to, the published design

- **Reduction tree.** It is a greedy full-adder column compression tree, not
  the HPM tree itself.
- **M2/M3 in low-precision modes.** Their products are zeroed in the
  low-precision modes, by way of a one-bit flag register. The source leaves
  this open.
- **Clock gates.** Each gate has a latch in front of its AND gate. The
  source describes a plain AND gate.
- **Reset.** An asynchronous reset was added to every register. The source
  has none.
- **Enable-to-register mapping.** The mode table names three enables but
  not which registers each one drives. The mapping here (T1 to M1, T2 to M2
  and M3, T3 to M4) is the one that matches the mode names.
- **Split of P4.** The prose of the source speaks of the low N/2 bits and
  the high N/2 bits of P4. Its block diagram and bit-alignment figure split
  P4 at bit N/2 instead: `P4[N/2:0]` goes into the N+1-bit adder and
  `P4[N-1:N/2+1]` into the BEC. Only that split makes the widths add up to
  2N, so this RTL follows the figures.
- **Results not reproduced.** The published area, delay and power figures
  (90 nm standard cells) are not reproduced by this RTL. It is functionally
  verified only.
