# Reformed-array-logic binary multiplier

Shift-and-add multiplication makes one partial product per multiplier bit and adds
them one after another. This design takes **three bits of the multiplier B per
clock**. Any 3-bit group asks for one of the eight multiples 0, A, 2A, …, 7A of the
multiplicand. The odd multiples A, 3A, 5A and 7A are computed once, before the
multiplication starts. The even ones are an odd multiple shifted left by one or two
places. So every clock, a multiplexer and a small barrel shifter can hand an
accumulating adder a complete 3-bit partial product. A 16 × 16-bit unsigned
multiplication then needs 6 partial-product clocks instead of 16. A few more
clocks follow to drain the adder.

The RTL is generic in the operand width `N` (default 16) and fixed at three
multiplier bits per clock, because the selection tables below are defined for
three bits.

## The arithmetic: retiring three product bits per clock

Write B in base 8, as groups b₀ (least significant) … b₅. N = 16 bits, zero-padded
to 18 bits, gives six groups. The product is

    P = Σ_k (b_k · A) · 8^k

The central adder keeps a feedback value `F`, which starts at 0. In each clock k
it computes

    S  = F + b_k·A        (b_k·A = pp_k, the partial product)
    product bits [3k+2 : 3k] = S[2:0]
    F ← S >> 3

`S[2:0]` is final because every later term carries a weight of at least 8^(k+1).
Shifting the feedback right by three is what aligns it with the next partial
product. So the adder never has to grow with the product, and no partial product
needs a shifter wider than two places.

The feedback stays small. Let `pp < 8·2^N` and `F < 2^N`. Then
`(F + pp) >> 3 < 2^N`, and the sum itself is below `2^(N+3)`. After the six group
clocks, `F = P >> 18` is still non-zero in general. Zero partial products are then
added, three more product bits per clock, until `F` is 0: the adder is "empty".
That gives a data-dependent count of adder clocks, between `ceil(N/3)` and
`ceil(2N/3)`. For N = 16 that is 6 to 11.

| operands (N = 16)                    | group clocks | flush clocks | adder clocks |
|--------------------------------------|--------------|--------------|--------------|
| 0x5555 × 0x02FC                      | 6            | 2            | 8            |
| 0x2AAA × 0x7FFF                      | 6            | 4            | 10           |
| 0xFFFF × 0xFFFF                      | 6            | 5            | 11           |
| either operand 0                     | 6            | 0            | 6            |

The count depends on the whole product, not only on B. The group phase always
runs over all six groups: zero groups are added as zero partial products, not
skipped.

## Datapath

```
 A ──► initial_adders ──A,3A,5A,7A──► pp_mux ──x──► barrel_shifter ──pp──► central_adder ──S[2:0]──► three_bit_shifter ──► output_registers ──► C
                                        ▲                 ▲                  │   ▲ F (S>>3)
 B ──► b_controller ──bits[2:0]──► mux_controller   barrel_shifter_controller└───┘
                                  (bits also feed barrel_shifter_controller)
                     sequencer: load / shift / add / flush / done
```

Widths for N = 16 are given in brackets.

- **`initial_adders`**: makes 3A = A + 2A, 5A = A + 4A and 6A = 3A << 1, then
  7A = A + 6A. The 7A adder therefore sits behind the 3A adder. Outputs are N+3 bits
  [19]. The circuit is combinational and A must stay stable during an operation.
- **`csa_rca_adder`** (with **`full_adder`**): the adder used both here and in the
  central adder. A row of full adders reduces three operands to sum and carry words
  (carry-save). A ripple-carry chain then adds the two words. In both uses the third
  operand is 0, so the carry-save row acts as a row of half adders. The structure is
  kept as the original design draws it.
- **`b_controller`**: an 18-bit register. `sel` (Select) loads B zero-extended.
  `shift` moves it right by three. `bits` is the current group and `empty` means no
  set bit is left.
- **`mux_controller` / `pp_mux`**: the controller decodes the group into a one-hot
  select (`mux_sel_t`):

  | group         | 000  | 001, 010, 100 | 011, 110 | 101 | 111 |
  |---------------|------|---------------|----------|-----|-----|
  | mux output    | 0    | A             | 3A       | 5A  | 7A  |

  The multiplexer is an AND-OR per bit.
- **`barrel_shifter_controller` / `barrel_shifter`**: a one-hot shift
  (`shift_sel_t`). Groups 010 and 110 shift by 1, making 2A and 6A. Group 100 shifts
  by 2, making 4A. Every other group shifts by 0. The output is two bits wider than
  the input [21].
- **`central_adder`**: a 25-bit `csa_rca_adder` adds `pp` and the feedback
  register `F`, which is 25−3 = 22 bits. Its outputs are `S[2:0]` and `empty`
  (`F == 0`). 25 is the width the original design gives. The arithmetic needs only
  N+3 = 19 bits, so the upper bits stay 0. An assertion checks that the sum never
  overflows.
- **`three_bit_shifter`**: three flip-flops that register `S[2:0]`. This is one
  pipeline stage between the adder and the product register.
- **`output_registers`**: a 3·ceil(2N/3) = 33-bit register. Each shift puts the
  three new bits at the top and moves the rest right by three. The first group
  therefore ends at bits 2..0 once all 11 groups have been shifted in. See the next
  section for what happens when fewer groups come out.
- **`sequencer`**: the control state machine described under "Control and timing".
- **`ral_multiplier`**: the top, which wires all of the above. The shared types and
  size functions are in the package `ral_pkg`.

## Early finish and product alignment

The product register shifts right, so a product that finishes after 8 groups sits
3·(11−8) bits too high. The groups that were not produced would all have been
zero. On the shift marked `last`, the register therefore also shifts right by
`3·pad_groups` in the same clock, with `pad_groups = 11 − cycles`. The product then
lands at C0 without the extra clocks. This one-step alignment is this design's own
way of meeting the requirement that the product end in order. It costs a variable
shifter on the register input. An alternative is to keep clocking zeros into the
register for the missing groups. That needs no shifter but always takes 11
register clocks.

## Control and timing

The `sequencer` states are `IDLE → LOAD → ADD ×ceil(N/3) → FLUSH …`:

- **LOAD** (1 clock): loads B and clears the feedback and product registers.
- **ADD**, one clock per group: adds the group's partial product, captures `S[2:0]`
  and shifts B. From the second clock on it also shifts the previous three bits
  into the product register. This phase ignores `empty`.
- **FLUSH**: while `F ≠ 0` it adds a zero partial product. Once `F = 0` it
  performs the final aligned shift of the last captured bits, pulses `done` and
  returns to IDLE.

Latency: call the edge that samples `start` edge 0. LOAD follows it, and the adds
follow edges 1 … `cycles`. `done` is high after edge `cycles + 1`, and `c` holds the
product from edge `cycles + 2` on. At the 40 ns
clock period used in the original evaluation, 8 adder clocks take 320 ns.
`cycles` reports the number of adder clocks of the last operation.

Assertions check the following:

- the multiplexer and shifter selects are one-hot or zero;
- the central adder does not overflow;
- B has been shifted out before any flush add;
- the adder is empty after 11 groups;
- `a` is held while `busy`.

## Interface of `ral_multiplier`

| port     | dir | width            | meaning |
|----------|-----|------------------|---------|
| `clk`    | in  | 1                | clock |
| `rst_n`  | in  | 1                | asynchronous active-low reset |
| `start`  | in  | 1                | one-clock pulse while idle; `b` is captured, `a` must then be held until `done` |
| `a`, `b` | in  | N                | multiplicand, multiplier (unsigned) |
| `busy`   | out | 1                | an operation is running |
| `done`   | out | 1                | one-clock pulse; `c` is valid after this clock |
| `c`      | out | 3·ceil(2N/3)     | product a·b; bits above 2N are 0 |
| `cycles` | out | clog2(ceil(2N/3)+1) | adder clocks of the last operation |

Parameters: `N` (operand width, default 16) and `ADD_W` (central adder width,
default 25, at least N+5). The group width of three is a package constant. A
different group width would need another set of initial multiples and a wider
shifter.

## How this RTL relates to the original description

The following parts follow the published design:

- the block structure;
- the adder structure (carry-save then ripple, with a constant-0 third input);
- the selection and shift tables;
- the feedback of the sum's upper bits and the 3-bit output path;
- the right-shifting product register;
- the 25-bit central adder;
- running until the adder is empty.

The following are this design's own choices or readings:

- **Selection table.** The published table lists group 100 under both A and 3A and
  never lists 110. The shift table and the prose both say 6A is 3A shifted by one,
  so 110 selects 3A here.
- **Control.** The start/done handshake, the clear and enable signals, the
  asynchronous reset and the state machine are new. The original gives only a clock
  and a Select input.
- **Output alignment.** The early-finish alignment described above is this
  design's own.
- **A is not registered.** This matches the original datapath, which feeds A
  straight into the initial adders. Hold it stable while busy.
- **Loading B** takes one clock. The original quotes a fixed 30 ns.
- **Cycle counts.** The design gives 8 adder clocks for example 1 (0x5555 × 0x02FC)
  and 11 for all-ones operands, as the published results report. The published
  result for 0x2AAA × 0x7FFF is 11 clocks; this design takes 10.
- **Published products.** Several printed results do not match their printed
  operands, so the testbenches check exact products:
  - The 16-bit example 1 result is 33203884, but 21845 × 764 = 16689580.
  - The example 2 result is 357870251, but 10922 × 32767 = 357881174.
  - The 6-bit walk-through gives 1101000011 (835), but 13 × 63 = 819.
  - The example 3 product, 011111111111111100000000000000001, is 65535², so that
    example is run with sixteen-bit all-ones operands.

  The published waveform for example 1 agrees with the computed product in seven of
  its eight printed 3-bit columns. The waveform for example 2 shows the printed
  product, so its operands are the part that was misprinted.
- **Not covered.** Skipping runs of zero groups and signed operands are mentioned
  only as future extensions and are not built. The original schematic is a 45 nm standard-cell netlist. Nothing
  here is technology-specific, and no timing, area or power figures are claimed.

## Simulation

Every testbench is self-checking. It prints `TB_RESULT checks=<n> failures=<m>` and
has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ral_pkg.sv tb/tb_ral_multiplier.sv \
          --top-module tb_ral_multiplier -Mdir obj && obj/Vtb_ral_multiplier
```

Swap in any other testbench name the same way.

- **`tb_ral_multiplier`** runs the full-size design (N = 16, no overrides) end to
  end. It covers:
  - the three published examples, including the 8-clock count of example 1 and the
    exact printed product of example 3;
  - corner cases and 3000 random operand pairs;
  - a latency check against an independent cycle count for every operation;
  - coverage counters, each of which must be non-zero: each of the eight group
    codes, each shift, flush clocks, early finishes and full-length finishes.

  It runs in well under a second.
- **`tb_ral_multiplier_n6`** builds the design with N = 6. It runs the 6-bit
  walk-through: 001101 × 111111, first three sum bits 011, four adder clocks. It
  then runs all 4096 operand pairs.
- **`tb_ral_multiplier_sizes`** checks other widths. N = 8 runs all 65536 operand
  pairs. N = 32 runs with `ADD_W = 37` on corner cases and 5000 random pairs. Each
  run checks both the product and the adder-clock count.
- **Unit testbenches** (`tb_<module>` for each block) check each block against
  arithmetic computed in the testbench: exhaustive decoder tables, random adder and
  shifter operands, central-adder sequences rebuilt from the 3-bit outputs, and a
  clock-by-clock check of the sequencer's outputs.
