# NMQ-RO: a ring-oscillator strong PUF with non-monotonic response quantization

A strong physical unclonable function (PUF) answers a challenge with a response
bit that depends on the manufacturing variation of one particular chip. Most
strong PUFs, the arbiter PUF being the classic example, compare two nominally
identical paths and answer "which one is faster". That answer is a monotonic
function of the delay difference, so each response leaks the sign of a
(nearly linear) function of the hidden delays, and machine-learning attacks
model the PUF from a modest number of challenge-response pairs.

The NMQ-RO replaces that comparison with a *non-monotonic* quantizer. Two
challenge-dependent ring oscillators, p and q, start together. Ring q drives a
counter (the *trap counter*); ring p drives a single toggling flip-flop (the
*toggle bit*). When the trap counter reaches a final value `g` both rings are
stopped, and the response is the toggle bit:

    r = LSB( number of rising edges of p while q makes g rising edges )
      ≈ LSB( round( g · D_q(c) / D_p(c) ) )

where `D_p(c)`, `D_q(c)` are the challenge-dependent traversal delays of the
two rings. As the frequency ratio of the rings moves, the response alternates
0, 1, 0, 1, ... rather than switching once. Only the least significant bit of
a scaled ratio is exposed, so a single response says little about which ring
is faster. Larger `g` makes the bands narrower, which means more information
is lost per response, but also more noise-induced bit flips. Several
instances can be XOR-composed (k-XOR-NMQ-RO) for extra resilience at a
moderate `g`, typically `g = 200`.

This repository holds SystemVerilog for that design. It contains the
synthesizable control and counting logic, and a behavioural model of the
custom ring-oscillator pair. Ten instances sit on one chip together with the
XOR composition.

## Structure

```
                        challenge[63:0] (shared by both rings and all instances)
                              |
 start ──► nmq_ctrl ──ro_en──►│ nmq_ring_pair (behavioural)                 
   clk      │  ▲  ▲           │   ring p: NAND2 + 64 stages ──ro_p──┬──► nmq_toggle_bit ──► response
            │  │  │           │   ring q: NAND2 + 64 stages ──ro_q──┼──► nmq_trap_counter ─┐
            │  │  └─ toggle bit                                      └──► nmq_test_counter   │ hit
            │  └──── trap hit ◄─────────────────────────────────────────────────────────────┘
            └─ clr (clears counters and toggle bit)
   = nmq_ro (one instance)

 nmq_puf_chip: 10 × nmq_ro (same challenge, g, start) ──responses[9:0]──► nmq_xor_combine(mask) ──► xor_response
```

| file | role |
|---|---|
| `rtl/nmq_pkg.sv` | sizes (64-bit challenge, 16-bit counters, 10 instances), controller state type, mismatch hash used by the ring model |
| `rtl/nmq_ring_pair.sv` | behavioural model of the two challenge-dependent ring oscillators |
| `rtl/nmq_trap_counter.sv` | counts edges of q, raises `hit` at `g` |
| `rtl/nmq_toggle_bit.sv` | T flip-flop on edges of p, the response |
| `rtl/nmq_test_counter.sv` | counts all edges of p, for characterisation |
| `rtl/nmq_ctrl.sv` | start/clear/run/done sequencing and the asynchronous ring stop |
| `rtl/nmq_ro.sv` | one NMQ-RO instance |
| `rtl/nmq_xor_combine.sv` | masked XOR of instance responses (k-XOR-NMQ-RO) |
| `rtl/nmq_puf_chip.sv` | top: ten instances plus the XOR |

## The ring oscillators

Each ring is a NAND2 gate followed by 64 delay stages. One NAND input is the
shared enable and the other is the ring's own output. Each stage holds two
tri-state inverters in parallel. Challenge bit `c_i` enables one of them and
`~c_i` the other, so the bit chooses which physical device sets that stage's
delay. Both rings see the same challenge bits. With 64 stages there are 2^64
challenges, and each one picks a different pair of rings.

`nmq_ring_pair` models this with delays, not gates:

* every inverter and NAND gets a delay `nominal × (1 + SIGMA·z)`, rounded to
  1 fs, where `z` is a repeatable standard-normal value computed from `SEED`
  and the device index (formula in `nmq_pkg.sv`). Each `SEED` is one die;
* one traversal of ring r takes `D_r(c) = t_nand + Σ_i t_inv[i][c_i]`, and
  the ring's period is `2·D_r(c)`;
* a disabled ring rests **high**: the NAND output is forced to 1 and an even
  number of inverters follows. After enable, the first output edge is
  *falling*, one traversal later;
* **stop rule.** When the enable falls, a *rising* wavefront already in the
  ring still arrives, because the NAND output was 1 and stays 1. A *falling*
  one is cancelled, because the NAND returns to 1. A ring stopped while its
  output is low therefore makes exactly one more rising edge. A ring stopped
  while high makes none.
* `JITTER_PS` adds white Gaussian noise to each traversal. It is 0 by default,
  so a simulated die always gives the same answer.

Defaults are 20 ps per inverter, 15 ps per NAND and `SIGMA` = 3.6 %, so one
traversal takes about 1.3 ns. The published work gives no delay figures. These
values are this model's own. `SIGMA` was tuned so that the spread of
`g − toggles` over challenges is about 0.54, 0.93 and 1.8 at g = 100, 200
and 400. That matches the published characterisation of the silicon closely.

The model is not synthesizable, and a real implementation needs hand-placed
custom cells: symmetric layout of the two rings, and tri-state inverters
sharing each challenge line.

## One evaluation, and why it is exact

This is the subtle part of the design. The counters are clocked by the rings
themselves, and the stop must not depend on the test clock.

1. `start` (one `clk` cycle; ignored while busy) moves `nmq_ctrl` to CLEAR.
   `clr` is a flip-flop output held high for 3 cycles. It asynchronously
   clears the trap counter, toggle bit and test counter; their clocks, the
   rings, are stopped at that time. The 3 cycles also let the previous run's
   trap flag drain out of the 2-flop synchroniser.
2. RUN: the `run` flip-flop rises and `ro_en = run & ~hit`. Both rings start
   at the same instant.
3. On the rising edge of q that brings the trap counter to `g`, the same edge
   sets the `hit` flip-flop. `hit` is not a decode of the count, so it cannot
   glitch while counter bits ripple. `ro_en` falls combinationally, so both
   rings stop at that instant: q is high and stops at once, and p follows the
   stop rule above.
4. `hit` reaches the clock domain through two flip-flops. On the third clock
   edge after the stop the controller samples the toggle bit into `response`
   and raises `done`, which stays high until the next `start`.

With the stop rule, the number of rising edges of p is exactly

    toggles = #{ k ≥ 1 : (2k−1)·D_p < 2·g·D_q }  =  floor( ceil(2g·D_q / D_p) / 2 )

which is `g·D_q/D_p` rounded to the nearest integer. The response is its LSB.
If an edge of p falls exactly on the stop instant the outcome is a race. In
real silicon that is metastability. In the model it needs equality at 1 fs,
and the testbenches skip such cases.

Timing rules:

* the clock period must exceed one ring traversal, so that the last rising
  edge of p (at most one traversal after the stop) has landed before the
  toggle bit is sampled two cycles later. The testbenches use 10 ns against a
  traversal of about 1.3 ns;
* an evaluation takes 4 + ⌈2·g·D_q / T_clk⌉ + 3 cycles, about 58 cycles at
  g = 200 and 100 MHz;
* there is no timeout: if the rings never run, the instance stays busy until
  reset.

`g` is a run-time input, 16 bits wide. `g = 0` behaves as 65536. The test
counter keeps the full edge count, so a tester can read `g − toggles` per
challenge; `trap_counts` returns `g` after every run.

## Composition: k-XOR-NMQ-RO

All instances evaluate the same challenge. `nmq_xor_combine` XORs the
responses selected by `xor_mask`, so `k = popcount(xor_mask)`. A one-hot mask
reads a single NMQ-RO, and masks with two or three bits set form the 2- and
3-XOR compositions. The per-instance `responses` are always available as well.

## Top-level interface (`nmq_puf_chip`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | test clock, asynchronous active-low reset |
| `start` | in | 1 | pulse: evaluate `challenge` on all instances |
| `challenge` | in | 64 | challenge |
| `g` | in | 16 | trap counter final value |
| `xor_mask` | in | 10 | instances in the XOR composition |
| `responses` | out | 10 | per-instance responses |
| `xor_response` | out | 1 | k-XOR response |
| `busy` / `done` | out | 1 | any instance busy / all instances done |
| `toggles` | out | 10 × 16 | test counters (edges of p) |
| `trap_counts` | out | 10 × 16 | trap counters (equal `g` after a run) |

Parameters: `N_INST` (10), `CHAL_W` (64, also the number of ring stages),
`CNT_W` (16), `BASE_SEED` (instance i uses `BASE_SEED + i`), and the ring-model
parameters `T_INV_PS`, `T_NAND_PS`, `SIGMA` and `JITTER_PS`.

## What follows the published design and what is this implementation's choice

Follows the published design: the two challenge-dependent rings with NAND
enable and tri-state inverter stages, with 64 stages; trap counter on one
ring and toggle bit on the other; both rings stopped when the counter reaches
`g`; response taken from the toggle bit; a test counter of total toggles; ten
instances; the XOR composition of instances evaluating the same challenge.

This implementation's choices:

* **Direction of the ratio.** The published formula is written as
  `LSB(floor(g·D_p/D_q))`, with p the toggle-bit ring. Counting p edges while
  q makes g edges gives `g·D_q/D_p` instead. The RTL follows the wiring, and
  the formula above is exact for it. Both forms take the LSB of g times a
  ratio of two delays that is close to 1.
* The clocked start/clear/done handshake, the 3-cycle clear, the 2-flop
  synchroniser, the registered `hit`, the 16-bit counters and the run-time `g`.
* The XOR sits on chip behind a mask. On the original test chip the
  composition was formed by post-processing instance responses off chip.
* All instances share one challenge. The surrounding test logic and pads
  were not described, so the top has plain parallel ports instead.
* All ring delay numbers, the mismatch distribution and the jitter model.
  Temperature dependence is not modelled. It dominates the measured error
  rates over 0–50 °C, so simulated error rates here come from jitter only.

## Not included

* The arbiter PUF that shared the test chip. It served only as a reference
  for comparison.
* The chip's surrounding test logic and its pads. Their interface was not
  described.
* Error correction and majority voting. The design deliberately uses
  neither.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The expected values come
from `tb/nmq_ref_pkg.sv`, which re-derives device delays, traversal times and
the exact toggle count from the formulas above, independently of the RTL.

| testbench | checks |
|---|---|
| `tb_nmq_trap_counter` | count after every edge, `hit` exactly on the g-th edge, freeze after `hit`, g = 1 and g = 0 (wrap) |
| `tb_nmq_toggle_bit` | parity after every edge, clear |
| `tb_nmq_test_counter` | edge counts, wrap, clear |
| `tb_nmq_ctrl` | 3-cycle clear, `clr` never with `ro_en`, ring stop in the same instant as `hit`, `done` exactly 3 edges after `hit`, captured response, start while busy ignored |
| `tb_nmq_ring_pair` | every edge time against `D_r(c)` to 1 fs, edge polarity, both stop cases, rest level |
| `tb_nmq_xor_combine` | 1-, 2-, 3-bit, random and empty masks |
| `tb_nmq_ro` | toggles, response, trap count and latency for g = 1 … 800 |
| `tb_nmq_puf_chip` | full default size: all 10 instances and the XOR output for 62 evaluations at g = 100, 200, 400, 800 and 5000. Counts single, 2-XOR and 3-XOR evaluations, information loss, both stop cases, repeatability, and that responses sorted by `D_q/D_p` change value more than once (non-monotonic). Uniformity about 0.51, uniqueness about 0.49 at g = 200 |
| `tb_nmq_population` | six dies (60 instances with distinct mismatch), 128 challenges at g = 200. Uniformity mean 0.496 (spread 0.049 over instances), uniqueness over 32-bit response words 0.501 |
| `tb_nmq_characterise` | with 3 ps jitter, 100 challenges enrolled and re-evaluated 4 times at g = 100/200/400. BER ≈ 2.4 / 3.8 / 5.6 %, rising with g. 3-XOR BER is about 3× single. `g − toggles` spread 0.54 / 0.92 / 1.8 |

Simulate any of them with Verilator 5, for example the full chip:

```
verilator --binary --timing --assert --no-sched-zero-delay rtl/nmq_pkg.sv tb/nmq_ref_pkg.sv \
    rtl/nmq_ring_pair.sv rtl/nmq_trap_counter.sv rtl/nmq_toggle_bit.sv \
    rtl/nmq_test_counter.sv rtl/nmq_ctrl.sv rtl/nmq_ro.sv \
    rtl/nmq_xor_combine.sv rtl/nmq_puf_chip.sv tb/tb_nmq_puf_chip.sv \
    --top-module tb_nmq_puf_chip
./obj_dir/Vtb_nmq_puf_chip
```

`--no-sched-zero-delay` tells Verilator that no delay is ever zero. That
holds because the ring model clamps each traversal to at least 1 fs. All
testbenches, `tb_nmq_<block>.sv`, build the same way with their own top
module, and finish in seconds at full size. Verilator simulates two states
only, so every register that is read is reset or cleared before use.
Synthesis of the digital blocks (`nmq_ctrl`, counters, toggle bit, XOR) is
straightforward. `nmq_ro` and `nmq_puf_chip` contain the behavioural ring
model, so a synthesis flow must replace `nmq_ring_pair` with the custom ring
macro, which has the same ports.
