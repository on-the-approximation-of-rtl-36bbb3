# Approximate sequential multiplier with a segmented carry chain

A sequential (shift-and-add) multiplier needs only one n-bit adder and
forms an n x n product in n clock cycles. Its clock period, however, is set
by the carry chain of that n-bit adder. This design cuts the carry chain in
two at bit position `t`. The low `t` bits are added by an LSP adder
(least significant part), the upper `n-t` bits by an MSP adder (most
significant part). The carry out of the LSP adder is not passed to the MSP
adder in the same cycle. It is stored in a flip-flop and enters the MSP
adder one cycle later. The critical path therefore shrinks to the longer of
the two segments, roughly half of it when `t = n/2`. In exchange the product
is approximate, and the split point `t` sets the accuracy. A carry left over
from the very last addition is handled by an optional *fix-to-1* correction.

The RTL is unsigned, fully parameterised in `N` (operand width) and `T`
(split point), and defaults to the 64-bit multiplier with a halved carry
chain (`N = 64`, `T = 32`). The accuracy is configured when the multiplier
is built: each split point is a separate instance, and `T` cannot be
changed at run time. Only the fix-to-1 correction is switchable while
running.

## How a product is formed

Two n-bit shift registers hold the state:

* **A** holds the running partial sum, already shifted right by one;
* **B** holds the multiplicand `b` at the start and fills with the low
  product bits as `b` is consumed.

On the clock edge that accepts `start`, A and the carry flip-flop are
cleared and `b` is loaded into B. Then, for `j = 0 … n-1`, one clock cycle
each:

1. The partial product is `a AND B[0]`, i.e. `a` if bit `j` of `b` is 1,
   otherwise 0.
2. The segmented adder computes `sum = A + partial product`:
   * LSP: `A[t-1:0] + pp[t-1:0]`, carry-in 0, gives `sum[t-1:0]` and the carry `c_lsp`;
   * MSP: `A[n-1:t] + pp[n-1:t] + c_ff`, where `c_ff` is the LSP carry stored
     in the previous cycle. It gives `sum[n-1:t]` and the carry-out `c_msp`.
3. On the clock edge, `A <= {c_msp, sum[n-1:1]}`, `B <= {sum[0], B[n-1:1]}`
   and `c_ff <= c_lsp`.

After n cycles, `{A, B}` is the 2n-bit product. With `T` equal to `N` the
split would vanish and this would be the ordinary accurate shift-and-add
multiplier. The RTL requires `1 <= T < N`.

### What the late carry does to the result

In exact arithmetic the LSP carry of accumulation `j` belongs at bit `t` of
that same sum, which is product weight `2^(t+j)`. The design adds it at bit
`t` of the *next* accumulation. By then everything has shifted right once,
so it lands at weight `2^(t+j+1)`. Each such late carry therefore makes the
result too large by `2^(t+j)`. The carry produced in the last accumulation
(`j = n-1`) has no next cycle: it would have had weight `2^(n+t-1)` and is
lost. This makes the result too small by that amount. Exhaustive simulation
at n = 4 and n = 8 finds the largest absolute error without fix-to-1 to be
exactly `2^(n+t-1)`, i.e. this single lost carry.

Worked example (n = 4, t = 2, two 2-bit adders), `a = 1011` (11),
`b = 1101` (13). In the third accumulation the LSP adder produces a carry.
It reaches the MSP one cycle late, and the result is `1001 1111` (159)
instead of `1000 1111` (143). The end-to-end testbench checks this case.

### Fix-to-1

If the LSP carry of the last accumulation is 1 and `fix_en` is high, the
output multiplexers replace the `n+t` least significant product bits by
ones, giving `2^(n+t)-1` in place of the low part. The flip-flop still holds
that carry when the product is ready, and the decrement unit's zero flag
marks that the sequence is complete. Together they drive the multiplexer
select. The correction acts on the outputs only: the registers keep the
uncorrected product, so `fix_en` may be changed while the result is held.

Fix-to-1 lowers the mean *absolute* error but shifts the signed mean error
negative, and it raises the worst case (see the table below). `fix_en = 0` is
the choice when errors are meant to cancel, e.g. in a chain of approximate
multipliers.

## Interface and timing

| Port      | Dir | Width | Meaning |
|-----------|-----|-------|---------|
| `clk`     | in  | 1     | clock, rising edge |
| `rst_n`   | in  | 1     | asynchronous reset, active low |
| `start`   | in  | 1     | start a product; accepted when `busy` is low |
| `a`       | in  | N     | multiplier; **must stay stable while `busy` is high** |
| `b`       | in  | N     | multiplicand; captured on the accepting edge |
| `fix_en`  | in  | 1     | enable fix-to-1 |
| `busy`    | out | 1     | accumulations in progress |
| `done`    | out | 1     | product valid; stays high until the next `start` |
| `p`       | out | 2N    | approximate product |

If `start` is sampled high at clock edge E0, `busy` is high for the next N
cycles and `done` rises after edge E0+N. A new `start` can be given in the
cycle `done` is high, so back-to-back products take N+1 cycles each.
`start` during `busy` is ignored. The multiplier `a` is not registered:
like the AND gates in front of the adder, it is read in every accumulation
cycle. An assertion in the top module flags a change of `a` while busy.

## Structure

| File | Block |
|------|-------|
| `rtl/asm_pkg.sv` | controller state type |
| `rtl/approx_seq_mul.sv` | top: datapath wiring, partial-product AND gates, fix-to-1 select |
| `rtl/controller.sv` | IDLE / RUN / DONE sequencing, start/busy/done |
| `rtl/decrement_unit.sv` | remaining-accumulation counter with zero detect |
| `rtl/segmented_accumulator.sv` | LSP and MSP adders and the carry flip-flop between them |
| `rtl/segment_adder.sv` | accurate W-bit adder (one segment) |
| `rtl/shift_register.sv` | registers A and B: sync clear, parallel load, right shift with serial input |
| `rtl/fix_to_one_mux.sv` | fix-to-1 output multiplexers |

The segment adders are written as a plain `+`. The scheme does not depend
on the adder type, so synthesis may choose ripple, carry-lookahead or an
FPGA carry chain. At the defaults, a generic synthesis run gives two 33-bit
adders, a 6-bit decrementer, a 96-bit multiplexer and 138 flip-flops: 64 +
64 for A and B, 6 counter bits, the carry flip-flop and 3 controller state
bits (the synthesis tool re-encodes the state one-hot).

## Measured accuracy

Exhaustive over all operand pairs (n = 8), from `tb/tb_workloads.sv`. ED is
the exact product minus the approximate one. NMED is MED divided by
`(2^n-1)^2`.

| t | fix-to-1 | error rate | MED | mean abs ED | MAE |
|---|----------|-----------|-----|-------------|-----|
| 2 | off | 0.5649 | 4.21 | 135.6 | 512 |
| 2 | on  | 0.5648 | -109.7 | 124.1 | 1003 |
| 3 | off | 0.6337 | 9.94 | 304.2 | 1024 |
| 3 | on  | 0.6336 | -248.1 | 280.8 | 1967 |
| 4 | off | 0.6537 | 19.47 | 627.0 | 2048 |
| 4 | on  | 0.6536 | -515.8 | 583.4 | 3895 |

A closed form for the MAE, `2^(n+t-1) - 2^(t+1)`, has been proposed for this
multiplier. It is not reproduced here: without fix-to-1 the worst case found
is `2^(n+t-1)` for every configuration simulated (n = 4, 8 exhaustive;
n = 28, 30, 32 random). With fix-to-1 it is larger still. The RTL follows
the bit-level definition of the approximate product exactly, checked
against an independent model of that definition.

## Verification

Each block has a self-checking testbench in `tb/`, ending with a line
`TB_RESULT checks=<n> failures=<n>`:

* `tb_segment_adder`, `tb_segmented_accumulator`, `tb_shift_register`,
  `tb_decrement_unit`, `tb_fix_to_one_mux`, `tb_controller`: unit tests
  against models written in the testbench.
* `tb_approx_seq_mul`: N = 8, T = 4. All 65536 operand pairs, random
  `fix_en`, the latency of each product, the handshake, and the worked
  example above. It counts late carries, applied and suppressed fix-to-1,
  inexact products and ignored starts, and fails if any never happens.
* `tb_approx_seq_mul_full`: the default 64-bit build on 20007 products
  (corner cases and random), with the same mechanism counts.
* `tb_workloads`: configurations n = 4 … 256 with various t, fix-to-1 on
  and off, with the error statistics above.

The reference model (`tb/asm_ref_pkg.sv`) evaluates the sum/carry
recurrence bit by bit, with no registers or shifts, so it does not share
structure with the RTL. It handles operands up to 256 bits.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/asm_pkg.sv tb/asm_ref_pkg.sv rtl/*.sv tb/asm_check_unit.sv \
    tb/tb_approx_seq_mul.sv --top-module tb_approx_seq_mul
./obj_dir/Vtb_approx_seq_mul
```

Replace the last file and the top name for the other testbenches.
`tb/asm_check_unit.sv` is needed only by `tb_workloads`. All testbenches
finish in a few seconds.

## Choices made here, and differences from the published description

* **Datapath source.** The datapath is rebuilt from the written
  description and the bit-level sum/carry equations of the approximate
  multiplier. The names and widths (registers A and B, `A_lsb`, `B_lsb`,
  n-bit buses, product halves) follow the drawing of the accurate
  sequential circuit it extends. The RTL reproduces the equations bit for
  bit.
* **Controller and handshake.** The published description gives the
  datapath but not its controller. The IDLE/RUN/DONE sequence and the
  `start`/`busy`/`done` protocol are this design's own.
* **One addition and shift per clock.** The addition and the right shift of
  each accumulation happen on the same clock edge: A is loaded with the new
  sum already shifted right. This gives n cycles per product, matching "one
  addition per clock cycle".
* **Fix-to-1 range.** The formal definition, and the statement that all
  `n+t` LSBs are set, are followed: bits `n+t-1 … 0`. One passage of the
  description instead says bits `n+t-1 … 1`.
* **Fix-to-1 enable.** Fix-to-1 is described as something that may be
  disabled. Here it is a run-time input, `fix_en`.
* **Carry flip-flop clear.** The flip-flop has the asynchronous clear of the
  description (tied to `rst_n`). It also has a synchronous clear, so each
  product starts with carry 0 without a reset.
* **Resets.** All registers reset asynchronously to 0. The shift registers'
  synchronous clear/load/shift operations are as described.
* **Decrement unit.** It is loaded with n-1, so the zero flag is high during
  the last accumulation and while the result is held. It saturates at 0.
* **Signedness.** Unsigned operands only, as in the description.
* **Not included.** The accurate sequential and the combinational
  multipliers that the approximate design is compared against are not part
  of this RTL. Neither are the FPGA and ASIC implementation results.
