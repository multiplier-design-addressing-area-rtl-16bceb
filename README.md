# Tiled multipliers with small Booth arrays, a DSP and LUT tiles

A radix-4 Booth array is one of the cheapest ways to build a multiplier from FPGA logic:
each level of the array is one row of LUTs on one carry chain, and each level retires two
bits of the multiplier. Its weakness is depth. The levels are stacked, the partial sum of
every level is routed into the next one, and the critical path (or the latency, once
pipelined) grows faster than the operand size. Multiplier *tiling* takes the opposite
approach: the product is cut into many small sub-products ("tiles": DSP blocks and small
LUT multipliers), every tile works in parallel, and a compressor tree adds the results.
That is fast but spends more LUTs.

This design combines the two. A large multiplier is tiled, and among the tiles are Booth
arrays of only a few levels (at most four by default). Each tile is shallow, the tiles run
side by side, and the Booth arrays keep most of their LUT efficiency. One DSP block can take
the least significant corner of the product. This gives area/delay points between a
monolithic Booth array and conventional tiling.

The RTL is SystemVerilog (IEEE 1800-2017), synthesizable, with a self-checking testbench
for every module.

## The multiplier board and its tiles

Picture the product `X * Y` as a board with X's bits along one side and Y's bits along the
other. Each square `(i, j)` is one partial-product bit `x_i y_j` of weight `2^(i+j)`. A tile
is a rectangle of the board. It multiplies a slice of X by a slice of Y, and its product
enters the final sum shifted by the board position of its lowest corner:

    X * Y = sum over tiles of (X[xh:xl] * Y[yh:yl]) * 2^(xl + yl)

`tiled_multiplier` covers the board with a fixed rule:

1. **DSP corner** (`USE_DSP = 1`). A `dsp_tile` takes the lowest 24 bits of X and the
   lowest 17 bits of Y. That is the unsigned capacity of an AMD DSP48 (25x18 signed), and
   `DSP_WX`/`DSP_WY` change it. If an operand fits the DSP completely, sign bit included, the DSP covers all of it. A 16x16
   multiplier therefore uses the DSP alone and no LUTs.
2. **Stripes.** The rest of the board is two regions. One holds the X bits beyond the DSP
   next to its Y bits; the other is the full-width band of Y bits above the DSP. Each
   region is cut, from the LSB up, into horizontal stripes of at most `2*BOOTH_LEVELS - 1`
   Y bits (7 for four levels). The stripe holding the sign bit of a signed Y may be one bit
   taller (8 for four levels).
3. **Tile per stripe.** A stripe of three or more bits is a `booth_array`. So is any stripe
   holding a signed Y's sign bit, whatever its height. A 2-bit stripe is a `mult_2xk` tile.
   A 1-bit stripe is a row of 1x1 `lut_tile`s, one AND gate each.

With the default 32x32 unsigned build, this gives:

| tile | X bits | Y bits | kind |
|---|---|---|---|
| DSP | 23:0 | 16:0 | 24x17 DSP |
| beside the DSP | 31:24 | 6:0, 13:7 | 8x7 Booth arrays, 4 levels |
| beside the DSP | 31:24 | 16:14 | 8x3 Booth array, 2 levels |
| above the DSP | 31:0 | 23:17, 30:24 | 32x7 Booth arrays, 4 levels |
| above the DSP | 31:0 | 31 | row of 32 1x1 tiles |

**Signed multipliers.** A tile is signed in an operand only if it holds that operand's
MSB. Every stripe reaches the MSB of X, so its X slice is signed when `SIGNED = 1`. Only
the top stripe holds the MSB of Y. Each tile's product is sign- or zero-extended to the
full product width before it enters the tree, so the sum is the two's-complement product.

The rule is simple on purpose. The tiles actually placed in the paper come from an integer
linear program that minimises LUTs for a given tile set and DSP budget. Those tilings are
not reproduced here: the same structure is built, but not the optimal placement.

## Inside a Booth array

`booth_array` computes `P = X * Y + D` for a WX-bit X, a WY-bit Y and a WX-bit
accumulate input D. Set D to 0 when it is not used. Y is recoded into radix-4 digits
`BE_m in {-2, -1, 0, 1, 2}`, each read from the overlapping bit triple
`{y_{m+1}, y_m, y_{m-1}}` with `y_{-1} = 0`. Each digit gets one **level**:

* **Number of levels.** Unsigned Y: `floor(WY/2) + 1` levels. Y is zero-extended, and the
  extra top digit is 0 or +1. Signed Y: `ceil(WY/2)` levels. Examples: an unsigned 8x8
  needs 5 levels and a signed 8x8 needs 4. Four levels hold 7 unsigned or 8 signed bits.

* **Booth encoder** (`booth_encoder`). Turns the triple into three flags:
  * `z`: the digit is 0.
  * `c`: the digit is negative. Equal to `y_{m+1}`.
  * `s`: the magnitude is 2.

  | y_{m+1} y_m y_{m-1} | digit | z c s |
  |---|---|---|
  | 000 | 0 | 1 0 0 |
  | 001, 010 | +1 | 0 0 0 |
  | 011 | +2 | 0 0 1 |
  | 100 | -2 | 0 1 1 |
  | 101, 110 | -1 | 0 1 0 |
  | 111 | 0 | 1 1 0 |

* **One LUT per column** (`booth_lut_a`). Column n forms the partial-product bit:
  * pick `x_n`, or `x_{n-1}` when `s` is set (that is 2X);
  * force the bit to 0 when `z` is set;
  * invert it when `c` is set.

  It then combines the bit with `t_n`, the bit that the level above handed down. The LUT
  outputs `prop = pp ^ t_n` and `gen = t_n` to the slice carry logic. A level therefore
  costs one LUT per column and no separate adder.
* **Carry chain** (`carry_chain`). Per column, `sum = prop ^ carry` and
  `carry' = prop ? carry : gen`, which adds `pp + t`. The chain's carry-in is `y_{m+1}`. It
  supplies the "+1" that completes the two's complement of a negative digit. The pattern
  111 is the one subtle case: its row is all ones (z and c both set), and the +1 wraps it
  back to zero.
* **Handing down.** A level computes `s = t + BE_m * X`. Its two LSBs are final product
  bits `p_{2m}, p_{2m+1}`. The remaining bits, `s >> 2`, become `t` for the next level.
  Level 0 starts from `t = D`, which is how the array gets a free accumulate input. The
  last level supplies all remaining high product bits.

Why the depth grows: every level's t enters the next level's LUTs, so a w-bit multiplier
has about w/2 carry chains in series, linked by general routing. Capping a tile at four
levels caps this chain. The cap of four comes from the paper's level experiments: delay
jumps between four and five levels, while the LUT-efficiency gain per extra level shrinks.

**Width of a level, and the departure from the original array.** In the original
mapping, a level is WX+2 columns wide. Its two MSB columns use special LUT configurations
that build in constant sign-extension bits. Those special LUTs are not reproduced here.
Instead, X (when signed) and t are sign-extended explicitly, and every column uses the
same type of LUT. The row is one column wider than the original, WX+3, and `t` is WX+1
bits in two's complement. The extra column also keeps the accumulate input from
overflowing an unsigned array. The function is unchanged. The cost is one LUT per level
more than the original array.

## Compressor tree, final adder and pipelining

`compressor_tree` adds the tile products, each aligned and extended to `W = WX + WY`
bits:

* Every group of three rows becomes a sum row and a carry row: a 3:2 counter per column,
  with the carry row shifted left by one.
* This repeats until two rows are left.
* A carry-chain ripple adder then produces the result.

The number of stages follows from the row count. For example, 7 rows become 5, then 4,
then 3, then 2.

The original work uses an optimiser to choose among more efficient FPGA compressors
(generalized parallel counters, 4:2 row compressors, ternary adders). Only the plain 3:2
counter is used here, so this tree is correct but not LUT-optimal.

`PIPE_STAGES` selects the latency:

| PIPE_STAGES | registers | latency |
|---|---|---|
| 0 | none, combinational | 0 |
| 1 | after the tiles, before the tree | 1 cycle |
| 2 | also between the carry-save rows and the final adder | 2 cycles |

The published results use no register up to about 8x8, one up to about 30x30, and two
above that. The default 32x32 build uses two. `out_valid` follows `in_valid` with the
same latency. `rst_n` is synchronous and active low, and clears only the valid pipeline.

## Interface and parameters of the top, `tiled_multiplier`

| port | dir | width | |
|---|---|---|---|
| clk | in | 1 | clock (unused when PIPE_STAGES = 0) |
| rst_n | in | 1 | synchronous active-low reset of the valid bits |
| in_valid | in | 1 | operands valid |
| x | in | WX | multiplicand |
| y | in | WY | multiplier (the Booth-encoded operand of every Booth tile) |
| out_valid | out | 1 | product valid |
| p | out | WX+WY | product X*Y, two's complement when SIGNED |

| parameter | default | meaning |
|---|---|---|
| WX, WY | 32, 32 | operand widths |
| SIGNED | 0 | both operands two's complement |
| USE_DSP | 1 | place one DSP tile in the LSB corner |
| BOOTH_LEVELS | 4 | maximum levels per Booth tile (3 is the faster alternative) |
| PIPE_STAGES | 2 | 0, 1 or 2 register stages |
| DSP_WX, DSP_WY | 24, 17 | unsigned operand widths of the DSP tile (one more bit each when it holds a signed MSB); 18, 18 gives an 18x18 DSP corner |

The sub-blocks can be used on their own:

* `booth_array`: `WX`, `WY`, `SIGNED_X`, `SIGNED_Y`. Its default is the 8x8 unsigned example.
* `booth_level`: `WX`, `SIGNED_X`.
* `mult_2xk`: `K`, `SIGNED_B`.
* `lut_tile`: `WA + WB <= 6`.
* `dsp_tile`: `WA`, `WB`, `SIGNED_A`, `SIGNED_B`.
* `compressor_tree`: `N`, `W`, `PIPE_CPA`.

`booth_pkg` holds the Booth flag struct, the level-count functions and the stripe-cutting
functions.

## Where this RTL departs from the published design

* **Tiling.** The tile placement is a fixed rule, not the LUT-optimal result of an ILP.
  LUT counts and delays therefore differ from the published tables. Even the default
  32x32 build is not the published circuit.
* **Booth sign handling.** Explicit sign extension and one extra column per level replace
  the special MSB LUTs of the original mapping. The original also saves the two MSB LUTs
  of an unsigned array's last level; that saving is left to synthesis.
* **Compressors.** Only 3:2 counters and a ripple final adder are used. GPCs, 4:2
  compressors and ternary adders are not.
* **DSP.** Written as a plain product of sign/zero-extended operands, for synthesis to map
  onto a DSP48. The DSP's internal registers are not used. The introductory 24x24 example
  of the original uses an Intel 18x18 DSP mode. This design targets the AMD 24x17 tile by
  default; `DSP_WX = DSP_WY = 18` gives an 18x18 corner, but the logic tiles around it
  still follow the stripe rule.
* **2xk tile.** Built as one carry chain over both AND rows. It has K+2 columns, one more
  than the LUT count quoted for it, and it can take a signed k-bit operand.
* **Chosen here.** The location of the pipeline registers, the valid/reset handshake, and
  the split of X/Y signedness in `booth_array` are this design's own choices. The original
  does not describe them.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the outputs with
references computed independently in the testbench (wide integer arithmetic or the Booth
truth table), prints `TB_RESULT checks=N failures=M`, and has a watchdog.

* `tb_booth_encoder`, `tb_booth_lut_a`, `tb_lut_tile`, `tb_mult_2xk`: exhaustive.
* `tb_carry_chain`, `tb_dsp_tile`: random and corner operands.
* `tb_booth_level`: every digit, random X and t, unsigned and signed X.
* `tb_booth_array`: 8x8 unsigned and signed exhaustive (65 536 pairs each) with a random
  accumulate input, plus 32x7, 32x8 signed and a mixed-sign 12x5.
* `tb_booth_levels`: 32-bit-wide arrays with 3 to 6 levels, signed and unsigned.
* `tb_compressor_tree`: 1, 4, 7 and 9 rows. It also checks that the pipelined tree's
  result changes only on the clock edge.
* `tb_tiled_multiplier`: end to end. It includes the default 32x32 build with no
  parameter overrides, and six more builds that reach every tile kind:
  * DSP only;
  * Booth + 2xk;
  * Booth + DSP + 1x1 row;
  * signed with a signed 2xk tile;
  * signed 3-level;
  * 24x24 with an 18x18 DSP corner.

  The checker `tb_mult_checker` streams operands with random bubbles, pulses reset with
  work in flight, and checks the exact latency. The testbench fails if one of these never
  happens: a negative Booth digit, a negative product, a bubble, a reset flush, or
  activity in each tile kind.
* `tb_table5_configs`: 32 builds. Sizes 4, 8, 16 and 32; signed and unsigned; 0 and
  1 DSP; 3- and 4-level Booth tiles; combinational and pipelined.

Every testbench finishes in well under a second of simulation. To run one with plain
Verilator from the directory above `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/booth_pkg.sv tb/tb_tiled_multiplier.sv --top-module tb_tiled_multiplier
    ./obj_dir/Vtb_tiled_multiplier

Replace the testbench name to run another. `booth_pkg.sv` must come first, because the
other files import it. To try another configuration, change the parameters of an instance
in `tb_tiled_multiplier.sv` or `tb_table5_configs.sv`. The checker works out its reference
from the widths and `SIGNED`.
