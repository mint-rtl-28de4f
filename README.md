# MINT array: dynamic-precision 3x3 convolution with most-significant-digit-first arithmetic

Ordinary fixed-point hardware computes from the least significant bit upward.
Stop it early and you lose the *top* of the result. This design works the other
way round. Every operand and every result travels serially, one radix-2 signed
digit per clock, **most significant digit first** (MSDF, also called online or
left-to-right arithmetic). After `k` output digits the result is already known
to within `2^-k`. Lower precision therefore needs no separate datapath, mode
bits or reconfiguration. The hardware simply runs for fewer cycles.

The RTL implements the compute array of the MINT accelerator:

* 128 processing elements (PEs) in a tile of 8 output channels x 16 input channels.
* Each PE computes one 3x3 convolution window, `z = sum_{i=1..9} x_i * Y_i`.
* It uses nine online serial-parallel multipliers and a four-level online adder tree.
* One inner product at precision `P` (INT2 to INT8) takes **C(P) = 2P + 10 cycles**.

The precision can change from one window to the next without a bubble.

The weights are `W`. The activations are `A`, and the precision is `P`. For
these inputs the array returns, in the PE at row `m` and column `n`:

    z[m][n] = sum_tap (A >>> (8-P)) * W / 2^(P+7)

This result is exact when the weights are quantised to `P` significant bits.
With full 8-bit weights it is within `9 * 3/4 * 2^-2P` of that value.

## Signed digits and how the streams are timed

A digit is `{-1, 0, +1}`, carried as two wires `(p, n)` with value `p - n`.
`(1,1)` is a legal zero. The type is `mint_pkg::sd_t`. Because digits may be
negative, a unit can emit a digit before it has seen all of its inputs. Later
digits can still correct the earlier ones. The fixed number of input digits a
unit must see first is its *online delay* δ. Both units here have δ = 2.

Timing is the hardest part to follow, so all the conventions are listed here.
Cycle 0 is the first cycle of a window.

| stream | digit of weight 2^-k appears in cycle | first digit | last digit (precision P) |
|---|---|---|---|
| activation into a multiplier | k - 1 | 2^-1, cycle 0 | 2^-P, cycle P-1 |
| multiplier product | k + 1 | 2^-1, cycle 2 | 2^-2P, cycle 2P+1 |
| after tree level L (1..4) | k + 1 + 2L | 2^(L-1), cycle 2+L | 2^-2P, cycle 2P+1+2L |
| PE output (L = 4) | k + 9 | 2^3, cycle 6 | 2^-2P, cycle 2P+9 |

The window therefore takes cycles 0 .. 2P+9, that is `2P + 10` cycles. In the
original's terms that is `2P + δ_mult` for the multiplier plus `4 * δ_add` for the
tree.

Each adder level makes the sum able to grow by a factor of 2. Its output
stream therefore starts one cycle after its input, one position higher. A
digit of a given weight still leaves two cycles after it entered. The PE
output has `2P + 4` digits, with weights `2^3 .. 2^-2P`. Those four integer
positions cover `|sum| <= 9 * 1/2 * 1 = 4.5`.

Number formats (a choice of this design):

* An activation `A` is an 8-bit two's-complement value read as `A / 2^8`, in [-1/2, 1/2).
  In digit form its first digit is minus the sign bit. The other digits are the remaining bits.
* At precision `P` only the first `P` digits are sent, which is `A >>> (8-P)`.
* A weight `W` is read as `W / 2^7`, in [-1, 1).

## Online multiplier (`lrm`)

This is the radix-2 serial-parallel recurrence, with `x` serial and `Y` parallel:

    v[j]   = 2 w[j] + x_{j+2} * Y * 2^-2
    z[j+1] = SEL(v[j])
    w[j+1] = v[j] - z[j+1]

* **Residual.** The residual `w` is kept in carry-save form in two registers,
  WS and WC. It has 3 integer bits and 9 fraction bits, in two's complement
  modulo 8.
* **Selector.** The selector gives `+Y`, `0`, or `~Y` with a carry into the 3:2 adder, which together make `-Y`.
* **Estimate.** A 5-bit adder over the top bits of both carry-save words gives
  an estimate `v^`. It has two fraction bits and is never above `v`, and less
  than 1/2 below it.
* **Digit selection** keeps `|w| <= 3/4` for `|Y| <= 1`:

      z = +1  if v^ >=  1/4
      z = -1  if v^ <= -3/4
      z =  0  otherwise

* **Update.** `z` is subtracted from the integer bits of the sum word. Both
  words are then shifted left and stored as `2w`.

The first two cycles produce no digit. After that, one product digit comes
out per cycle, combinationally from the registers and the current `x` digit.
After `2P` digits the product of a `P`-digit `x` and a `P`-bit `Y` is exact.
The last residual is below one unit of the last place and both values lie on
the `2^-2P` grid.

`clr` zeroes the residual and forces the output to zero. The controller raises
it after cycle `2P+1`. This is the early termination: the multiplier stops at
`2P` digits, so the tree has drained before the next window.

## Online adder (`lra`) and the adder tree (`lra_tree`)

The adder is two full adders:

    upper:  x.p + y.p + ~x.n          = 2h + g
    lower:  g(j) + h(j+1) + ~y.n(j)   = 2t + s
    digit:  z(j-1) = t(j) + s(j-1) - 1     ->  z.p = t,  z.n = ~s(delayed)

* `g` and `y.n` are registered, so the lower adder pairs position `j` with the transfer from `j+1`.
* `s` is registered once more.
* There is no long carry chain.
* The reset state is the state after a run of zeros. A stream that ends is
  followed by zero digits, so windows need no clear between them.

The tree pairs neighbouring streams at each level: 9 -> 5 -> 3 -> 2 -> 1. That
takes 8 adders. The odd stream at a level goes through a two-cycle delay,
which is exactly the adder's timing.

## PE, array and controller

`pe` contains:

* nine weight registers, written one at a time;
* nine `lrm`s, whose `Y` operand is the two's-complement weight as a digit vector (the sign bit becomes a -1 digit);
* one `lra_tree`.

`mint_top` builds the array:

* PE(m, n) serves output channel `m` (rows, `TM = 8`) and input channel `n` (columns, `TN = 16`).
* Each column has an `act_serializer`. It captures that channel's nine
  activations when a window starts and shifts them out MSB first as digits,
  one per cycle.
* The serializer feeds all eight PEs of its column.
* All PEs run in lock step under one `mint_ctrl`.

The controller starts a window on `start && ready`. `ready` is high when the
array is idle and also in the last cycle of a window, so windows can follow
each other back to back. It latches `P`, which is clamped to 2..8 and asserted
to be in range, and counts the cycles. From the count it derives these
signals:

| signal | high in cycles |
|---|---|
| `act_load` | the accept cycle |
| `x_en` (activation digits) | 0 .. P-1 |
| multipliers released (`lrm_clr` low) | 0 .. 2P+1 |
| `out_valid` | 6 .. 2P+9 |
| `out_last` | 2P+9 |

Top-level ports:

* `w_we`, `w_row`, `w_col`, `w_tap`, `w_data`: write one weight per cycle.
* `start`, `prec`, `act[16][9]`: start a window.
* `z[8][16]`: the 128 result digit streams.
* `out_valid`, `out_last`, `run_prec`: qualify the results.

The `k`-th valid digit (k = 0, 1, ...) has weight `2^(3-k)`. Converting a
stream to binary is a running `acc = 2*acc + (p - n)`. The testbenches do
exactly that.

Throughput follows from the cycle count. Each PE does 9 multiply-accumulates
per `C(P)` cycles. The 128-PE array at INT8 therefore does 2 x 128 x 9
operations every 26 cycles.

## What comes from the original description and what does not

These parts follow the original description of the design:

* the MSDF principle and radix-2 signed digits;
* the multiplier recurrence and its block structure (selector, right shift,
  3:2 adder with carry input, CPA, SELM, M, left shift, WS/WC registers);
* the two-full-adder online adder with its two internal registers;
* 9 multipliers and a 4-level tree per PE, `δ = 2` for both units, and `C(P) = 2P + 10`;
* the 16 x 8 tiling with a common clock and reset;
* precision chosen per window by the cycle count alone.

These are this design's own choices:

* all word widths, the residual format and the selection constants;
* the operand scaling and the two's-complement-to-digit mapping;
* the pairing in the adder tree and its pass-through delays;
* the weight-write port;
* the activation serializer;
* the controller handshake, the `clr` termination and the clamping of `P`.

Points where this design departs from the original or stops short of it:

* **Adder output registers.** The original drawing of the adder shows
  registers on both outputs. Such registers would make each adder three
  cycles instead of two, and the stated cycle count would no longer hold. The
  adder output is therefore combinational here, and only the one register the
  algebra needs is kept.
* **No accumulation or buffers.** The design does not sum the 16 input-channel
  partial results of an output channel. It has no feature or weight buffers,
  no host interface, and no ReLU, pooling or fully connected layers. None of
  these is described. The array brings out every PE's digit stream instead.
* **Precision search not included.** The per-layer precision search is offline
  software. Its result is simply the `prec` value given with each window.
* **One PE size for all precisions.** The original states that one INT8 PE
  serves every precision. Yet its per-PE resource table lists a different
  size for each precision. This design follows the statement: one PE built
  for 8 bits, with precision set only by the cycle count.
* **Scaled multiplier recurrence.** The published recurrence omits the
  `2^-δ` factor on `x * Y`. Its drawing has a right-shift block in that
  place, and without the factor the residual is not bounded. The factor is
  included here.
* **No FPGA-specific mapping.** The design contains no FPGA-specific
  primitives. A generic synthesis gives 342 flip-flops per PE (about 44.9 K
  for the array), against 548 per PE reported for the FPGA implementation,
  whose internal widths are not published. LUT counts were not compared.
* **Throughput, power and accuracy not reproduced.** These numbers come from
  synthesis and network-level models and are not reproduced here.

## Verification

Every block has a self-checking testbench in `tb/`. Each one checks its block
against values computed independently in the testbench:

| testbench | what it checks |
|---|---|
| `tb_lrm` | 3000 random products at P = 2..8: exact with P-bit weights, within 3/4 ulp otherwise; no digit before cycle 2; zero while cleared |
| `tb_lra` | 3000 random 12-digit additions: exact sum, digit timing, stream ends cleanly; (1,1) zero encoding on the inputs |
| `tb_lra_tree` | 2000 random 9-stream sums: exact, digits only in cycles 4 .. L+7 |
| `tb_pe` | 1500 random windows at P = 2..8: exact or within the 9 x 3/4 ulp bound; nothing before cycle 6; C(P) cycles |
| `tb_act_serializer` | P-digit streams equal `A >>> (8-P)`; sign digit never +1; zero when disabled |
| `tb_mint_ctrl` | every P: C(P) busy cycles, P feed cycles, 2P+2 multiplier cycles, 2P+4 output digits; gap-free chaining |
| `tb_mint_top` | full 8 x 16 array at its default parameters, all 128 PEs checked on 32 windows |
| `tb_conv_tile` | a 3x3 convolution layer tile run window by window, results summed over input channels and compared with a direct convolution |

The full-array test covers:

* every precision from 2 to 8;
* windows chained back to back that switch precision;
* full 8-bit weights terminated early;
* weight reloads.

It counts each of these and fails if one never happens.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/mint_pkg.sv tb/tb_mint_top.sv --top-module tb_mint_top -o sim
    ./obj_dir/sim

Replace `tb_mint_top` with any other testbench name. Each testbench prints
`TB_RESULT checks=N failures=M` and has a watchdog. The array size (`TN`,
`TM`) and operand width (`WB`) are parameters of `mint_top`. `P` may not
exceed `WB`.
