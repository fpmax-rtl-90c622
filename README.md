# FPMax: four multiply-add units and their on-chip test harness

FPMax is a test chip with four floating-point multiply-accumulate units. Each one computes
`R = A + B * C`. They cover two precisions (IEEE single and double) and two goals:

- **Throughput units (FMA).** A fused multiply-add. The addend is aligned while the product is
  formed, and one adder produces the sum. Area and energy per operation are small. A dependent
  operation waits the same time whether it uses the result as a multiplier input or as the
  addend.
- **Latency units (CMA).** A cascade multiply-add: a multiplier, then a complete floating-point
  adder. The total pipeline is longer, but the addend is needed only when the adder starts. So a
  chain of accumulations (`acc = acc + x*y`) can forward each result to the next operation after
  only two cycles. Most floating-point code depends on accumulations, so the CMA has the smaller
  average delay per operation.

All four units forward their results to dependent operations *before rounding*. The last stage
only adds the rounding increment, and a dependent operation does not wait for it. The chip also
holds a built-in test harness: RAMs that feed one selected unit at full clock speed, loaded and
read over JTAG.

This RTL implements the four units, the forwarding network, the test harness and the JTAG access.
It follows the published organisation and the published numbers: stage counts, multiplier depths,
Booth radix and RAM sizes. Where the publication gives no detail, the choices here are marked as
this design's own.

## The four units

| unit   | top instance | format (EW/MW) | stages | multiplier stages | adder stages | Booth/reduction | multiply-forward latency | accumulate-forward latency |
|--------|--------------|----------------|--------|-------------------|--------------|-----------------|--------------------------|----------------------------|
| SP FMA | `u_sp_fma`   | 8 / 23         | 4      | 2                 | 1            | 3 / array (for ZM) | 3                        | 3                          |
| SP CMA | `u_sp_cma`   | 8 / 23         | 6      | 3                 | 2            | 2 / Wallace | 5                        | 2 … 5                      |
| DP FMA | `u_dp_fma`   | 11 / 52        | 6      | 2                 | 3            | 3 / array | 5                        | 5                          |
| DP CMA | `u_dp_cma`   | 11 / 52        | 5      | 2                 | 2            | 3 / Wallace | 4                        | 2 … 4                      |

"Latency" here means the issue distance, in cycles, from a producer to a consumer that uses the
producer's result. It is the minimum distance, and for multiply forwarding also the only one.
Every unit takes one operation per cycle. The rounded result leaves `STAGES` cycles after issue.
In each unit the last stage does nothing but finish rounding.

The two FMA units are one module, `fma_unit`. The two CMA units are one module, `cma_unit`. Each
module's parameter defaults are the single-precision configuration. `fpmax_top` sets the
double-precision ones.

## How an operation is computed

1. **Operand preparation (`fp_unpack`).** An operand is a 64-bit word (single precision uses bits
   [31:0]) plus a pending round-up bit `inc`, which is 0 for operands read from RAM. The block
   decodes sign, NaN, infinity and zero. It forms the significand including the hidden bit, adds
   `inc`, and normalises subnormals with a leading-zero count. The result is a `P+1`-bit
   significand (`P = MW+1`) with its MSB at bit `P`, plus the exponent of its LSB. With this
   normalisation, later stages never see a denormal input.
2. **Multiplier (`booth_mult`).** The two significands are multiplied exactly, with Booth
   recoding:
   - radix 4 (digits −2…2) for the SP CMA;
   - radix 8 (digits −4…4) for the other three units. Radix 8 needs the "hard" multiple 3X,
     formed once by one adder.

   Each partial product is a full-width two's-complement row. The rows are reduced to two by
   3:2 carry-save adders, and one carry-propagate adder then gives the product. The reduction
   has two forms:
   - **Wallace tree** (`TREE_WALLACE`, used by both CMAs): rows are taken three at a time at
     every level.
   - **Array** (`TREE_ARRAY`): one carry-save adder per row. The DP FMA uses it. The SP FMA
     also uses it, standing in for the original "ZM" modified array, whose structure is not
     described.

   The product is never rounded.
3. **Addition.** The two unit types differ here.
   - **FMA (`fma_adder`).** The product (`2P+2` bits) and the addend (`P+1` bits) go into one
     alignment window of `3P+8` bits. The top of the window is set by whichever operand reaches
     higher. The other operand is shifted right, and bits that fall out are collected in a
     sticky bit one position below the window. The signed sum is formed, its magnitude taken,
     and a leading-zero count normalises it. The window is wide enough for two cases:
     - bits are lost only when one operand is much smaller than the other;
     - massive cancellation happens only when nothing was lost.

     So the sum is exact apart from the sticky bit, and a single correct rounding follows.
   - **CMA (`cma_adder`).** A classic two-path adder working on the exact product. Both operands
     are brought to `2P+2` bits with their MSB at the top.
     - **Close path:** used for an effective subtraction whose exponent difference is −1, 0 or 1.
       The difference is computed exactly and may need a long normalising shift.
     - **Far path:** used in all other cases. It aligns the smaller operand with a sticky bit,
       adds or subtracts, and then needs a shift of at most two places.
4. **Rounding decision (`fp_round`).** The block does the following:
   - forms the biased exponent;
   - shifts right for subnormal results;
   - keeps MW fraction bits;
   - decides round-to-nearest-even from the round bit, the sticky bits and the last kept bit;
   - returns the overflow to infinity, zeros and the canonical quiet NaN (`0x7FC00000` /
     `0x7FF8000000000000`).

   The output is the **unrounded result** `{inc, word}`. `word` is the truncated result and `inc`
   says whether one unit in the last place must still be added.
5. **Final stage.** This stage adds `inc` to the exponent and fraction bits of `word` as one
   integer. The carry handles a fraction overflow, a subnormal that becomes normal, and an
   overflow to infinity, all without special cases.

Special cases follow IEEE 754:
- NaN in, `∞·0` and `∞ − ∞` give NaN.
- An infinite product or addend gives a correctly signed infinity.
- An exact zero sum is +0 unless both terms are −0.

Only round-to-nearest-even is built. No exception flags are produced.

## Forwarding and pipeline timing

This is the part of the design that differs most between the unit types, and the part a user
must get right when writing test programs.

Every unit has one **forwarding register**: the register at the end of stage `STAGES-1`, which
holds the unrounded result `{inc, word}`. It is the only source of forwarded data. An operation
issued in cycle `t` is in that register during cycle `t + STAGES − 1`. The instruction says which
operands come from forwarding. There is no hazard detection and there is no stall: a program that
forwards from the wrong distance gets the wrong value. Assertions in the units flag distances that
are out of range.

- **Multiplier inputs B and C (`b_byp`, `c_byp`).** These are consumed in stage 1, so the
  producer must be exactly `STAGES − 1` cycles back.
- **Addend A (`a_byp`, `a_dist`).**
  - In an FMA, A is also consumed in stage 1, so `a_dist` must be `STAGES − 1`.
  - In a CMA, A travels in a register chain beside the multiplier and is needed only when the
    adder starts, in stage `MUL_DEPTH + 1`. At every stage `k` of that chain, the value in the
    forwarding register replaces A when `a_dist == STAGES − k`. So any distance from
    `STAGES − MUL_DEPTH − 1` (the short accumulate latency, 2 cycles) up to `STAGES − 1` works.

DP CMA (5 stages), as an example:

```
stage:        1            2            3               4                 5
multiplier:   Booth-3 …    … product    |               |                 |
A chain:      A reg (k=1)  A reg (k=2)  adder input(k=3) |                |
adder:                                  close/far path  … round decision   |
                                                          -> forward reg   final rounding
accumulate forwarding: a_dist = 4 -> k=1, 3 -> k=2, 2 -> k=3 (adder input)
multiply forwarding:   b_byp/c_byp at distance 4 (stage 1)
```

So `acc = acc + b*c` can issue every 2 cycles on the DP CMA. On the DP FMA it can issue every
5 cycles.

The forwarded value is unrounded. The consumer's `fp_unpack` adds the pending `inc` while it
prepares the operand. So the producer never waits for its own increment, and the consumer sees
exactly the correctly rounded value. Where the increment is added is this design's choice. The
original chip uses a published technique for this, which is not described in enough detail to
copy.

Inside the multiplier group and the adder group, the logic is written as one combinational block
followed by that group's pipeline registers. The stage counts and what each stage group does are
the original design's. The exact cut points are left to retiming.

## The test harness

```
 JTAG pins -> jtag_tap --acc_req--> test_ctrl ----req----> fpu_selector --> SP FMA / SP CMA / DP FMA / DP CMA
                       <-acc_rdata-  (PC, RAMs)  <-result-               <--
```

- **Memories (`sram_1r1w`, inside `test_ctrl`).** Sizes are the original chip's:
  - instruction RAM: 256 × 26 bits;
  - three operand RAMs (A, B, C): 64 × 64 bits each;
  - results RAM: 256 × 64 bits.

  Each RAM has one write port and one synchronous read port, and is written as an array.
- **Instruction word (`fpmax_pkg::inst_t`, 26 bits, MSB first).** This encoding is this design's
  own. Only the 26-bit width is the original's.

  | bits  | field    | meaning                                                   |
  |-------|----------|-----------------------------------------------------------|
  | 25    | `valid`  | 0 = bubble, nothing issued this cycle                     |
  | 24    | `last`   | stop fetching after this instruction                      |
  | 23    | `a_byp`  | A from the forwarding register                            |
  | 22:20 | `a_dist` | issue distance to A's producer                            |
  | 19    | `b_byp`  | B from the forwarding register                            |
  | 18    | `c_byp`  | C from the forwarding register                            |
  | 17:0  | addresses | A, B, C operand RAM addresses, 6 bits each               |

- **A run.** Writing the control register with bit 8 set starts a run on the unit in bits [1:0]
  (0 SP FMA, 1 SP CMA, 2 DP FMA, 3 DP CMA).
  - The PC fetches one instruction per cycle from address 0.
  - The next cycle reads the operands.
  - The cycle after that issues the operation to the selected unit.
  - Fetch stops after `last` or at address 255.
  - Results are written in issue order from address 0.
  - The run ends when every issued operation has returned. A run of `n` instruction slots on a
    unit with `S` stages takes `n + S + 3` cycles from start to `done`. That count can be read
    back.
- **Control register** (read): [1:0] unit, [8] busy, [9] done, [24:16] results written,
  [63:32] cycles of the last run.
- **JTAG (`jtag_tap`).** This is a standard IEEE 1149.1 TAP with a 4-bit instruction register:
  - IDCODE `0001`, value `0x0FA00001`;
  - BYPASS `1111`;
  - ACCESS `1000`, a 76-bit data register shifted LSB first:
    `{write, space[2:0], address[7:0], data[63:0]}`. Address spaces: 0 instruction RAM, 1–3
    operand RAMs A–C, 4 results RAM, 5 control register.

  Update-DR performs the access. A read returns its data at the next Capture-DR, so unloading it
  takes a second scan. The TAP runs on the core clock and samples TCK through synchronisers, so
  TCK must stay below a quarter of the core clock. RAM accesses are ignored while a run is in
  progress.
- **Selector (`fpu_selector`).** It routes the request to one unit and returns that unit's
  results. Unselected units see an all-zero request, so their datapaths stay quiet.

## What is not modelled

- **Power domains and body bias.** On the chip each unit sits in its own power domain, and the
  measured gains come from supply scaling and static or dynamic back-gate bias of the FD-SOI
  process. These are analog and physical and have no logic here. The RTL has no power-switch or
  bias-control pins, because none are described.
- **The ZM modified array** of the SP FMA. A plain carry-save array takes its place.
- **Structure of the published adders.** The FMA adder of the original uses a 72-bit aligner
  (SP), a 3:2 carry-save stage, a leading-zero anticipator and an incrementer for the upper
  product bits. The CMA close path uses an anticipator too. Here the sums are computed with
  exact leading-zero counts on the result. The arithmetic function is the same, but the timing
  structure differs.
- **Rounding modes and flags.** Other rounding modes, exception flags and hazard interlocks are
  not built.
- **The original instruction encoding.** It is not reproduced; the format above is this design's.

## Files

- `rtl/fpmax_pkg.sv`: shared types (instruction, request, access request) and sizes
- `rtl/booth_mult.sv`: Booth-2/Booth-3 significand multiplier with Wallace-tree or array
  reduction
- `rtl/fp_unpack.sv`: operand decoding, applying the pending increment, normalisation
- `rtl/fma_adder.sv`: fused window adder
- `rtl/cma_adder.sv`: close/far-path adder
- `rtl/fp_round.sv`: rounding decision; produces the unrounded result
- `rtl/fma_unit.sv`: FMA pipeline
- `rtl/cma_unit.sv`: CMA pipeline
- `rtl/sram_1r1w.sv`: test RAMs
- `rtl/jtag_tap.sv`: JTAG TAP
- `rtl/test_ctrl.sv`: test controller with the PC
- `rtl/fpu_selector.sv`: unit selector
- `rtl/fpmax_top.sv`: chip top
- `tb/fp_ref_pkg.sv`: reference model. It computes `A + B*C` exactly as one very wide integer
  (LSB weight `2^(2(1−bias−MW))`) and rounds by locating the MSB. It has no alignment window and
  no sticky logic, so it is independent of the RTL's method.
- `tb/fp_stim_pkg.sv`: operand generator. It produces near-equal exponents for cancellation,
  subnormals, zeros, infinities, NaNs and values near overflow and underflow.
- `tb/fpu_driver.sv`: random issue with forwarding at every legal distance. It checks results
  and exact latency.
- `tb/jtag_bfm.sv`: JTAG tester tasks
- `tb/tb_*.sv`: one self-checking testbench per block. `tb_fpmax_top` is the end-to-end test at
  full size.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/fpmax_pkg.sv tb/fp_stim_pkg.sv tb/fp_ref_pkg.sv tb/tb_fpmax_top.sv \
  --top-module tb_fpmax_top -Mdir obj_top
./obj_top/Vtb_fpmax_top
```

Replace `tb_fpmax_top` with `tb_fma_unit`, `tb_cma_unit`, `tb_booth_mult`, `tb_sram_1r1w`,
`tb_jtag_tap`, `tb_test_ctrl` or `tb_fpu_selector` to run the block tests. Each test ends with
`TB_RESULT checks=N failures=M`.

- `tb_fpmax_top` works only through the JTAG pins. For each unit it does the following:
  - loads operands and a 40-slot program containing bubbles, multiply forwarding and
    accumulate forwarding at every distance;
  - runs the program and checks the exact cycle count;
  - reads back every result and compares it with the reference model.

  It takes a few seconds.
- `tb_fma_unit` and `tb_cma_unit` each run about 4,500 random operations through the SP and DP
  configurations of their unit. They check every result bit-exactly and check the latency.

## How far it can be trusted

Every result in the tests is compared bit-exactly with the reference model: normal, subnormal,
overflowing, cancelling and special cases, with forwarded operands. All tests pass.

Coverage is random, not exhaustive. Within the 40-slot programs of the top-level test, the CMA
close path is hit only a few times. The unit-level tests hit it more often.

Timing, area and power of the original chip depend on the physical design and process. This RTL
does not reproduce them.
