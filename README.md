# 8-bit x 4-bit matrix multiplication with 16-bit accumulators

Networks quantised to 4-bit weights and 8-bit activations are usually run on
hardware built for equal operand widths. The 4-bit weights are widened to
8 bits, and the products are summed in 32-bit accumulators. That costs the same
register and buffer bandwidth as a full 8 x 8-bit network and gives no speed-up.

The idea here is to keep the weights packed at 4 bits and to sum the 12-bit
products in **16-bit** accumulators. Then a register or buffer of a given width
holds twice as many weights and twice as many results. The same operand and
result bandwidth therefore carries **twice as many multiply-accumulates (MACs)**.
The price is less headroom for carries: 16-bit accumulators have only 4 spare
bits above a 12-bit product. The answer to that risk is saturation that
*sticks*: once a result overflows it stays at the most negative or most
positive value, where it can be detected or simply used as is.

This RTL builds the idea twice:

| engine | where it belongs | per clock | results |
|---|---|---|---|
| `mmla_i8i4` | execution unit of a CPU SIMD instruction on 128-bit registers | one instruction = 64 MACs | 2 x 4 INT16 |
| `sa_engine_i8i4` (array `sa_array_i8i4` of `sa_pe_i8i4`) | 4 x 4 output-stationary systolic array of an accelerator | 32 MACs | 4 x 8 INT16 tile |

`asym_mm_top` puts both side by side on one clock and reset. They share no
data; they are in one top so that both can be built and tested together.

## Arithmetic shared by both engines

* Activations are signed 8-bit and weights are signed 4-bit. A product fits in
  12 bits: the extreme is +127 x -8 = -1016.
* Accumulators are signed 16-bit, so at least 32 worst-case products
  (32 x -1016 = -32512) always fit. The ResNet18 3x3 layers need 576 to 4608
  products per output, so overflow is possible. It is rare on real activations,
  which are mostly small and non-negative.
* `sticky_sat_add` does every accumulation. It forms the exact sum in one bit
  more than its widest input. A sum outside [-32768, 32767] is clamped to the
  nearer limit. An accumulator that already holds -32768 or +32767 keeps that
  value whatever is added. A 16-bit register lane has no room for a flag bit,
  so any value at a limit counts as "overflowed". A sum that lands exactly on a
  limit without overflowing therefore sticks as well. With parameter
  `STICKY = 0` the adder wraps instead (plain two's complement).
* **Where the clamp is applied differs between the engines.** This matters
  when comparing their results:
  * `mmla_i8i4` adds the 8 products of one instruction exactly and clamps once
    per instruction.
  * A PE of the array clamps after every single product.

  The two give the same result whenever no partial sum leaves the 16-bit range.
  A reduction that overflows and would later have come back into range also
  ends at the same limit in both, because the limit sticks. They can differ
  only when a partial sum inside one 8-product slice crosses the range and
  returns. That is rare, and the testbenches model both rules exactly.

Two 4-bit weights share one 8-bit operand slot (`asym_mm_pkg::wgt_pair_t`).
The weight for the even output column sits in bits [3:0] and the one for the
odd column in bits [7:4].

## The SIMD instruction unit (`mmla_i8i4`)

One instruction computes `C += A x B`:

| register | contents | lane layout (lane 0 = least significant bits) |
|---|---|---|
| A (128 bit) | 2 x 8 signed 8-bit activations | `A[r][k]` at bit `(r*8 + k)*8` |
| B (128 bit) | 8 x 4 signed 4-bit weights | `B[k][n]` at bit `(n*8 + k)*4`: each column's 8 weights are contiguous |
| C (128 bit) | 2 x 4 signed 16-bit accumulators | `C[r][n]` at bit `(r*4 + n)*16` |

An 8 x 8-bit instruction on the same three registers can only do 2 x 8 times
8 x 2 into 2 x 2 INT32 results, which is 32 MACs. Here the B register holds
the whole 8 x 4 block of weights and C holds eight 16-bit results, so one
instruction does 64 MACs.

Timing: `valid_i` may be high on every clock. `c_o` and `valid_o` follow one
clock later. `ovf_o` has one bit per C lane, set when that instruction's exact
sum did not fit. There is no stall input. Reset clears only `valid_o`.

**Using it for a larger product.** Software keeps C stationary and steps
through K in slices of 8. Each slice needs one instruction per 2 x 4 output
cell. Loaded registers are reused across instructions. For a 4 x 8 block,
each slice loads two A registers (rows 0-1 and rows 2-3) and two B registers
(columns 0-3 and 4-7). It then issues the four combinations, one per clock.
Each cell's accumulator is needed again only four instructions later, so the
one-clock latency never stalls the stream. A 4 x 8 x K block takes K/2 clocks.
`tb_asym_mm_top` checks exactly this schedule.

## The systolic array (`sa_pe_i8i4`, `sa_array_i8i4`, `sa_engine_i8i4`)

### Processing element

The PE started out as the PE of a conventional 8 x 8-bit output-stationary
array: one multiplier, one adder, a 32-bit accumulator, and pipeline
flip-flops that pass the activation to the right and the weight downward. The
changed PE keeps the same operand and accumulator storage and uses it
differently:

```
               w_i = {w_hi, w_lo}  (8 bit: two 4-bit weights)
                    |       |
   a_i (8 bit) ---->X lo    X hi ------------------------> FF --> a_o
                    |       |
                    +       +    <- each adds its 12-bit product
                    |       |
 acc_right_i ---> MUX     MUX    <- shift_i: take the right neighbour's value
                    |       |
                  [ ACC: two 16-bit halves ] ------------> acc_o (to the left)
                          |
                          FF --> w_o (the weight pair, downward)
```

Both products use the *same* activation. The pair of 16-bit accumulators
occupies the 32 bits the original accumulator had. Products are formed from
the operands as they arrive, and the flip-flops pass them on one clock later.
`shift_i = 0` accumulates (both halves, with sticky saturation). `shift_i = 1`
loads the right neighbour's accumulators, which is how results leave the
array.

### Array and dataflow

`sa_array_i8i4` is a ROWS x COLS grid, 4 x 4 by default. Row `r` of the array
holds output row `r`. PE column `c` holds output columns `2c` and `2c+1`. A
4 x 4 array therefore holds a 4 x 8 tile of 16-bit results in the storage that
held a 4 x 4 tile of 32-bit results before. Activations enter at the left edge
and weight pairs at the top. Results leave at the left edge. Only neighbouring
PEs are connected.

The streams must be skewed: row `r` is delayed by `r` clocks and column `c` by
`c` clocks. Then activation `A[r][k]` and weight pair `B[k][2c..2c+1]` meet in
PE (r, c) exactly `k + r + c` clocks after the first beat. The last products
of a tile of depth K reach the bottom-right PE `ROWS + COLS - 2` clocks after
the last beat. For the readout, `shift_i` is raised for COLS clocks. Each
clock moves every accumulator one PE to the left, and the rightmost PEs take
in zeros. So `acc_o[r]` shows output columns 0-1, then 2-3, and so on. After
the last shift the array is all zeros and ready for the next tile, with no
separate clear.

### Engine: feeding and draining a tile

`sa_engine_i8i4` wraps the array with the skew delay lines and a three-phase
sequencer:

| phase | `in_ready` | `out_valid` | what happens |
|---|---|---|---|
| FEED | 1 | 0 | one beat per accepted clock: `in_a[r] = A[r][k]`, `in_w[c] = {B[k][2c+1], B[k][2c]}`. A clock without a beat feeds zeros, which change nothing. The beat with `in_last` ends the tile. |
| FLUSH | 0 | 0 | `ROWS + COLS - 2` clocks of zeros, while the last beat travels to the far corner |
| DRAIN | 0 | 1 | `out_acc[r] = {C[r][2j+1], C[r][2j]}` for output `j = 0 .. COLS-1`. Each accepted output shifts the array. `out_last` marks `j = COLS-1`. A low `out_ready` stalls the drain, and an assertion checks that a stalled output holds still. |

With no bubbles and no stalls, a tile of depth K takes
`K + (ROWS + COLS - 2) + COLS` clocks, which is K + 10 at 4 x 4. The first
result appears `ROWS + COLS - 1` clocks after the last beat. The next tile's
first beat is accepted on the clock after the drain ends. Drain and the next
tile's accumulation do not overlap, because a shifting PE cannot accumulate
at the same time.

## Cost and rate at the default sizes

A coarse yosys synthesis of `asym_mm_top` gives about 790 word-level cells
and 944 flip-flop bits. Of these, the array has 768 accumulator and pipeline
bits and the SIMD unit has 137. There are no memories.

| ResNet18 3x3 layers | MACs per output (C_in x 3 x 3) | SIMD unit: clocks for a 4 x 8 block | array: clocks for a 4 x 8 tile |
|---|---|---|---|
| conv 2, 4 | 576 | 288 | 586 |
| conv 7, 9 | 1152 | 576 | 1162 |
| conv 12, 14 | 2304 | 1152 | 2314 |
| conv 17, 19 | 4608 | 2304 | 4618 |

Neither engine limits the reduction depth. `tb_resnet18_layers` runs all four
depths through both engines. It uses synthetic data: non-negative activations
up to 31, half of them zero, and uniform 4-bit weights. These are not the
activations of a trained network, so the number of clamped outputs it prints
says nothing about real overflow rates.

## What follows the source and what is this design's own

Taken from the published description:

* the operation: the 2 x 8 INT8 by 8 x 4 INT4 into 2 x 4 INT16 shapes at
  128-bit width, and signed operands;
* the sticky saturation rule;
* the PE's structure: two multipliers fed by one 8-bit activation and two
  4-bit weights, two adders, two muxes, and one accumulator register split
  into two 16-bit halves;
* the directions of activation, weight and result movement;
* output-stationary dataflow;
* the 4 x 4 array as drawn.

Chosen here, where the description is silent:

* the lane order inside the 128-bit registers;
* the packing of a weight pair;
* clamping once per SIMD instruction, after the exact 8-product sum;
* the one-clock latency of the SIMD unit and its `ovf_o` flags;
* sticky saturation inside the array's PEs;
* the single broadcast `shift_i`, and zero fill from the right;
* the skew delay lines, the FEED/FLUSH/DRAIN sequencer and its valid/ready
  handshakes;
* reset behaviour: asynchronous, active low, clearing the accumulators and
  pipeline registers (only `valid_o` in the SIMD unit);
* making sticky saturation the default (`STICKY = 1`), where the description
  offers it as an option.

Not built:

* the CPU's vector register file and loads, which the SIMD unit's register
  ports stand in for;
* the conventional 8 x 8-bit instruction and array, which serve only as the
  point of comparison;
* a weight-stationary version of the array, which is mentioned as possible
  but not described.

The array keeps its accumulator width in the package (16 bits). The SIMD
unit's `ACC_W` parameter also allows narrower accumulators, such as the 12 to
15 bits of the overflow study.

## Files and simulation

`rtl/` holds the package `asym_mm_pkg` and one module per file. `tb/` holds
one self-checking testbench per module, plus `tb_resnet18_layers`:

| testbench | checks |
|---|---|
| `tb_sticky_sat_add` | directed limits, random sums, random additions to clamped values; sticky and wrapping 16-bit instances and a sticky 12-bit one |
| `tb_mmla_i8i4` | 600 random instructions issued back to back against an integer model; the 32-product worst case fits, the 5th instruction clamps and stays clamped |
| `tb_sa_pe_i8i4` | clock-by-clock model of one PE, including shift-in near the limits |
| `tb_sa_array_i8i4` | 44 tiles of random depth, skewed by the testbench; back to back without reset (the drain must clear); positive and negative clamps |
| `tb_sa_engine_i8i4` | 60 tiles with random input bubbles and output stalls; exact clock count of undisturbed tiles and back-to-back tile start |
| `tb_asym_mm_top` | both engines at their default sizes on the same 4 x 8 x K products (random, clamping, and clamped-then-reversed); counts every mechanism (back-to-back issue, positive/negative clamp, sticky hold, bubble, stall, back-to-back tiles) and fails if one never occurs |
| `tb_resnet18_layers` | the four ResNet18 reduction depths on both engines |

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. With
Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/asym_mm_pkg.sv tb/tb_asym_mm_top.sv --top-module tb_asym_mm_top
./obj_dir/Vtb_asym_mm_top
```

Replace the testbench name to run any other one. Every run finishes in well
under a second. Verilator has only two signal states. All state that is read
is reset, so results do not depend on the random initial values of the
remaining registers.
