# Low-power shift-and-add multiplier

A shift-and-add multiplier forms an N x N product in N steps. Step k looks
at one multiplier bit B(k) and adds the multiplicand A, shifted by k places,
to a running sum when that bit is 1:

    P(0) = 0,   P(k+1) = P(k) + (B(k) ? A << k : 0),   A * B = P(N)

The textbook circuit pays for its simplicity in switching activity. Every
cycle it shifts the multiplier register to bring the next bit to a fixed
position and shifts the product register. It steps a binary counter, and it
runs the adder even when it only adds zero. This design keeps the same
N-step algorithm but removes most of that activity:

* **The multiplier register does not move.** A one-hot ring counter points
  at the current bit, and a selector with a one-hot select bus reads that
  bit in place.
* **The ring counter is clock-gated in blocks.** Only two of its flip-flops
  change per step, so its flip-flops are grouped in blocks of four. Each
  block has one small clock gate that opens only while the token is entering
  or inside the block.
* **Nothing is shifted.** The running product stays where it is. Only the
  N-bit partial product is moved into place by k bits. Every word is cut to
  the bits step k can actually use.
* **Additions of zero are skipped.** The running product sits either in a
  *feeder* register, which drives the adder, or in a *bypass* register,
  which goes around it. The choice is made one step ahead, so the adder's
  inputs only change before a step that really adds.
* **The adder is a ripple-carry adder.** Of the common adder structures,
  it makes the fewest transitions per addition.

The default configuration is 8 x 8 bits with ring-counter blocks of 4. It
gives a 16-bit product 8 clock edges after the edge that takes `start`.

## The step schedule

The hardest part to follow is the timing of the bits and the two registers.
Three facts fix it:

1. In step k the running product comes out of a selector:
   `cur = B(k) ? feeder + (A << k) : bypass`.
2. At the end of step k, `cur` is written to **one** register only, and the
   *next* bit picks which: the feeder if B(k+1) = 1 (the next step adds),
   the bypass register if B(k+1) = 0 (the next step skips the adder).
   Whichever register step k+1 reads therefore holds P(k+1).
3. So step k needs both B(k) and B(k+1). The ring counter runs one place
   ahead of the step: during step k its token is at bit k+1 (mod N), and
   the one-hot selector returns B(k+1). B(k) is the value the selector gave
   one cycle earlier, held in the flip-flop `b_now_q`. The step position k
   that the bit-width control needs is the token rotated back by one place,
   which is only wiring.

Worked example, A = 11001100 (204), B = 10101010 (170):

| step k | token at | B(k) | cur taken from | cur | B(k+1) | stored in |
|---|---|---|---|---|---|---|
| start | 0 -> 1 | – | – | both registers cleared, `b_now_q` = B(0) = 0 | | |
| 0 | 1 | 0 | bypass | 0 | 1 | feeder |
| 1 | 2 | 1 | adder: 0 + 408 | 408 | 0 | bypass |
| 2 | 3 | 0 | bypass | 408 | 1 | feeder |
| 3 | 4 | 1 | adder: 408 + 1632 | 2040 | 0 | bypass |
| 4 | 5 | 0 | bypass | 2040 | 1 | feeder |
| 5 | 6 | 1 | adder: 2040 + 6528 | 8568 | 0 | bypass |
| 6 | 7 | 0 | bypass | 8568 | 1 | feeder |
| 7 | 0 | 1 | adder: 8568 + 26112 | 34680 | – | `product` |

In the last step the token is back at bit 0. That marks the last step, so
the ring counter also counts the steps. After the multiplication it is
exactly where the next one starts, and no separate counter is needed.
Neither register is written in the last step; the result goes into the
output register `product`.

## Bit-width control

In step k the running product is below 2^(N+k), because it is A times the
k lowest bits of B. The aligned partial product fits in N+k bits and the
sum in N+k+1 bits. Three instances of `bit_width_control` use this:

| instance | input | output | keeps |
|---|---|---|---|
| partial-product aligner | A & B(k), N bits | shifted left by k, 2N-1 bits | N+k bits |
| feeder limiter | feeder register, 2N bits | adder operand, 2N-1 bits | N+k bits |
| sum limiter | adder result {cout, sum}, 2N bits | register data, 2N bits | N+k+1 bits |

The sum limiter's mask is also used as a per-bit load enable for the feeder
and bypass registers, so their upper bits stay still. In exact arithmetic
the limiters change no values. They exist to stop the upper bits toggling,
and a testbench checks the masks directly. The adder itself is 2N-1 bits
wide: its carry out is bit 2N-1 of the result.

## The block-gated ring counter

A plain N-bit ring counter clocks all N flip-flops on every step, though
only the flip-flop losing the token and the one gaining it change. A
flip-flop needs a clock only if its input or its output is 1. Gating each
flip-flop separately would cost more than it saves, so `lp_ring_counter`
groups the flip-flops into blocks of `BLOCK` (default 4). Each block gets
one `ring_clock_gate`, whose cost does not depend on the block size:

* One state bit records whether the token is inside the block.
* A 2:1 selector driven by that bit picks the state's next value. Outside,
  it takes the *entrance*, the flip-flop just before the block: the token
  comes in when that flip-flop holds the 1. Inside, it takes the inverse of
  the *exit*, the block's last flip-flop: the token leaves when the exit
  holds the 1.
* The block is enabled when `advance & (inside | entrance)`.

With N = 8 there are two blocks. On most steps only one block (4
flip-flops) is clocked. Both are clocked only on the step that carries the
token across a block boundary. With wider operands the share of idle
blocks grows. A counter that fits in one block is clocked on every step.
Assertions in the RTL check that the state stays one-hot and that each
gate's state always matches its block's contents.

## Interface and timing (`lp_shift_add_multiplier`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, rising edge |
| `rst_n` | in | 1 | asynchronous reset, active low |
| `start` | in | 1 | start a multiplication; ignored while `busy` |
| `a`, `b` | in | N | multiplicand and multiplier, unsigned, captured with `start` |
| `busy` | out | 1 | high for the N step cycles |
| `done` | out | 1 | one-cycle pulse when `product` has just been updated |
| `product` | out | 2N | a * b; holds until the next result |

The rising edge that sees `start` high while idle is edge 0. It captures the
operands, clears the feeder and bypass registers and moves the token to
bit 1. The steps occupy the next N cycles, and `product` and `done` are
valid after edge N. A new `start` may be given in the cycle `done` is high,
so back-to-back products take N+1 cycles each. Parameters: `N` (operand
width, default 8) and `RING_BLOCK` (ring-counter block size, default 4). Both
defaults live in the package `lpmul_pkg`.

## Files

| file | contents |
|---|---|
| `rtl/lpmul_pkg.sv` | default width and ring block size |
| `rtl/lp_shift_add_multiplier.sv` | top: control, operand and output registers, wiring |
| `rtl/lp_ring_counter.sv` | block-gated one-hot ring counter |
| `rtl/ring_clock_gate.sv` | the per-block clock gate |
| `rtl/onehot_bit_select.sv` | one-hot selector reading B(k) in place |
| `rtl/partial_product.sv` | A AND B(k) |
| `rtl/bit_width_control.sv` | aligner / limiter with load mask |
| `rtl/ripple_carry_adder.sv`, `rtl/full_adder.sv` | the adder |
| `rtl/feeder_bypass.sv` | feeder and bypass registers with the result selector |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_multiplier_widths.sv` | the whole multiplier at 3, 4 and 16 bits |

## Where this RTL departs from the published circuit

* **Clock gates are clock enables.** The published circuit gates the
  clocks of the feeder, the bypass register and the ring-counter blocks
  with logic driven by the inverted clock. Here every flip-flop is on the
  one clock, and each gate is the enable of its flip-flops. A synthesis
  flow with clock-gating insertion turns these enables back into gated
  clocks. The enables are exactly the published gating conditions.
* **Which bit picks the register.** The published block diagram labels the
  register clock gates with the current bit, while the description says
  the next bit decides. This RTL follows the description: with the current
  bit the running product would be stored in the wrong register.
* **Look-ahead ring counter and `b_now_q`.** The block diagram of the
  proposed circuit shows no flip-flop for B(k). One is added here, together
  with the one-place look-ahead of the token; the same arrangement appears
  in the earlier circuit this design builds on.
* **Clock gate details.** The published gate gives the selector and its
  Entrance/Exit inputs but not the polarity of Exit or the exact storage
  element. Here the state is a flip-flop and Exit is used inverted.
* **Block split of the ring counter.** The published figure for blocks of
  4 leaves one flip-flop ungated at each end. Here the blocks start at bit
  0, and the last block is shorter when N is not a multiple of `BLOCK`.
* **Comparison circuits are not included.** The published work measures
  this design against a conventional shift-and-add multiplier, an earlier
  low-power variant, a plain ring counter and a ring counter gated per
  flip-flop. Those serve only as baselines; none of them is part of this RTL.
* **This design's own choices.** The start/busy/done handshake, the operand
  and product registers, unsigned operands, asynchronous reset, the per-bit
  load mask and clearing both registers at start. The full adder is
  the standard one: the ripple chain is published, the cell's insides are
  not.

## How far it has been checked

* The 8-bit multiplier has been simulated for all 65,536 operand pairs
  (`tb_lp_shift_add_multiplier`). The checks include the 204 x 170 example,
  the exact latency of N edges, `busy` lasting N cycles, a `start` while
  busy being ignored, back-to-back operation and reset during a
  multiplication.
* The same test counts each mechanism and fails if one never occurs: steps
  through the adder, steps around it, feeder loads, bypass loads,
  ring-counter steps with a block gated off, and ring wrap-around.
* `tb_multiplier_widths` runs N = 3 and N = 4 exhaustively, including the
  3-bit example 011 x 010 = 00110, and N = 16 on 2,000 random pairs.
* Every module has its own testbench against an independent reference.
* Not checked: power, area or timing. The published figures for those come
  from an FPGA flow and are not reproduced here. The RTL only reproduces
  the activity-saving structure: fewer register loads, no shifting, and
  gated ring-counter blocks.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself.
With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -y rtl +libext+.sv rtl/lpmul_pkg.sv \
        tb/tb_lp_shift_add_multiplier.sv --top-module tb_lp_shift_add_multiplier
    ./obj_dir/Vtb_lp_shift_add_multiplier

Replace the testbench name to run another one. The exhaustive 8-bit run
takes about a second. To use a different width, override `N` on the top,
for example `lp_shift_add_multiplier #(.N(16)) u_mul (...)`. N must be
at least 2. The multiplier has been simulated at N = 3, 4, 8 and 16 with
blocks of 4, and the ring counter alone at 13 bits in blocks of 4.
