# Trigger-disabling acquisition for gated single-photon detectors

A gated single-photon avalanche diode (SPAD) only looks for a photon when it
receives a trigger (a "gate"). After every click it goes blind for a dead time
(its own recovery plus an afterpulse-blocking interval, typically several
microseconds). Acquisition electronics usually keep triggering at the
detector's maximum rate, often 4 to 8 MHz, well above the inverse of that dead
time. Two things then go wrong:

* **Futile zeroes.** Every trigger that falls in a dead time is read out and
  stored as "no click", although the detector could not have clicked. Under
  weak light (mean photon number 0.1, efficiency 0.1, 20 triggers lost per
  click) about one stored result in six is of this kind. Removing them takes
  post-processing time.
* **Self-blinding.** With two detectors, one for bit value 0 and one for bit 1,
  a click on one leaves it blind while the other is still live. The next click
  within the dead time must then come from the other detector. The raw key
  picks up anti-correlated runs (0101...), so it is no longer random. Once
  error correction reveals one bit of such a run, an eavesdropper knows the
  rest of the run, without doing anything herself.

This RTL stops the trigger at its source. Any detector click freezes the
trigger clock that drives the detectors and the result memory. The clock is
released only after a programmed number of trigger periods. Every trigger that
reaches a detector therefore finds it live. Every stored result is meaningful.
With two detectors, both are always live or both are blind.

## The feedback loop

```
                 det[0] ─┐
                 det[1] ─┤OR├──► C  FFD  (D = '1')  Q ──┬──► CE  COUNTER (clk = clk_src) ── count ─► B ┐
                                     ▲ CLR              │                  ▲ CLR                      COMP ── EQ ─┐
                                     │                  │                  │           cmp_value ─► A ┘           │
                                     └──────────────────┼──────────────────┴──────────────────────────────────────┘
                                                        └──► NOT ──► CE
   clk_src (CLOCK SOURCE) ─────────────────────────────────────────► CLK BUF ──► clk_out (CLOCK OUTPUT: detector gates)
```

| Part | Module | What it does |
|---|---|---|
| FFD | `td_ffd` | D flip-flop with D tied high. Its clock is the OR of the detector outputs and EQ clears it asynchronously. Q = "detectors dead". |
| COUNTER | `dt_counter` | Counts `clk_src` periods while Q is high. EQ clears it synchronously, and the clear takes priority over the enable. |
| COMP | `cmp_eq` | EQ = (counter == `cmp_value`). |
| inverter + CLK BUF | `td_acq_top`, `clk_buf_ce` | Glitch-free clock gate. `clk_out` = `clk_src` while NOT Q. |
| click flags | `click_capture` | One flag per detector, set by its click and cleared with the FFD. |
| MEMORY | `cache_mem` | Stores one word per trigger that reached the detectors. |
| top | `td_acq_top` | The wiring above, plus the write timing of the memory. |

The FFD, counter, comparator, inverter, clock buffer and detector OR gate follow
the original circuit. The click flags, the memory's write timing and host
interface, and the reset are additions. The original leaves them unspecified
and only notes that extra elements are needed to line up a recorded result
with its detection.

### Cycle by cycle

Let T be the trigger period and M = `cmp_value` (at least 1). Trigger k is the
k-th rising edge of `clk_src`.

1. Trigger k passes the clock buffer and gates the detectors.
2. A detector clicks on it. The avalanche edge clocks the FFD, so Q goes high.
   The click must arrive **before the rising edge of trigger k+1**: the
   detector response, cables and FPGA path together must take less than T.
   The original set-up measured 28 + 8 + 2 = 38 ns, which limits the trigger
   rate to about 26 MHz.
3. The clock buffer's enable latch is transparent while `clk_src` is low. It
   sees CE = 0, so trigger k+1 is suppressed whole. The counter starts
   counting at the same edge.
4. At trigger k+M the counter reaches M. EQ goes high combinationally and clears
   the FFD and the click flags asynchronously. That edge has already been
   blocked, because the latch closed while Q was still high.
5. During the next low phase the latch opens again. Trigger k+M+1 reaches the
   detectors, and on the same edge the counter is cleared to 0 and EQ drops.

After any click, exactly M triggers are suppressed, which gives a blocking
time of M·T. A trigger with no click suppresses nothing. M must cover the
detector's own dead time. For example, an id201 set to 10 µs at 4 MHz needs
M ≥ 40. If M is smaller, gates still reach a blind detector. If M is too
large, triggers are thrown away for no reason.

With `cmp_value` = 0 the comparator holds the FFD and click flags cleared, so
no trigger is ever disabled and no click is recorded. An assertion in
`td_acq_top` flags this case.

### Why the clock gate is a latch

`clk_buf_ce` stands in for the FPGA's global clock buffer with enable. The
enable comes from the detector, asynchronously, and can change in the middle
of a clock pulse. A plain AND would then cut that pulse short or create a
runt. The latch passes the enable only while the clock is low, so each gate
pulse is either passed whole or suppressed whole. On an FPGA, map this module
to the vendor's clock buffer with enable (BUFGCE on Xilinx parts). In an ASIC
flow, map it to an integrated clock-gating cell. The latch is the only one in
the design, and it is deliberate.

### Two detectors

Both detector outputs go through an OR gate into the FFD, and both detectors
are gated by the same `clk_out`. A click on either one therefore blinds both
for the same M periods. No trigger ever finds one detector live and the other
dead, which removes the mechanism behind self-blinding. `NUM_DET = 1` gives
the single-detector circuit. The loop works for any `NUM_DET`.

## Recording results

The detector pulse lasts only a few nanoseconds. `click_capture` holds it in a
per-detector flag: D tied high, clocked by its own detector, cleared by EQ
like the FFD. The flags show which detectors clicked on a trigger, including
coincidences.

`td_acq_top` registers the clock buffer's latched enable (`trig_prev`). On the
rising edge of trigger k+1, the memory stores the flags of trigger k, but only
if trigger k was passed. This is one period after trigger k, so writing it on
the next *gated* edge would be too late: that edge arrives only after the dead
time, and by then the flags have been cleared. The memory therefore runs on
the ungated `clk_src` with this write enable. Suppressed triggers never write,
so the memory holds no futile zeroes.

`cache_mem` fills a block of `DEPTH` words (`NUM_DET` bits each, bit d =
detector d clicked) in trigger order. When the block is full, `full` rises.
Results that arrive while it is full are discarded, and each one pulses
`dropped`. The host reads words through `rd_addr`/`rd_data` (one cycle of
latency, on `clk_src`) and then pulses `release_blk` to start a new block at
address 0. The block size of 8192 is the number of triggers per cache block in
the original performance figures. The drop-when-full behaviour and the
release handshake are this design's choice.

## Parameters and ports of `td_acq_top`

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_DET` | 2 | detectors ORed into the loop (2 = pairwise configuration) |
| `CNT_W` | 16 | width of the dead-time counter and `cmp_value` (own choice; 10 µs at 8 MHz needs only 7 bits) |
| `DEPTH` | 8192 | words per cache block |

Defaults live in `td_pkg`.

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk_src` | in | 1 | trigger clock source (e.g. 4 MHz, shared with the pulsed laser) |
| `rst_n` | in | 1 | asynchronous reset, active low |
| `det` | in | NUM_DET | detector outputs (asynchronous pulses) |
| `cmp_value` | in | CNT_W | blocking time in trigger periods, ≥ 1 |
| `clk_out` | out | 1 | gated trigger to the detectors |
| `disabled` | out | 1 | FFD output: triggers currently suppressed |
| `release_blk` | in | 1 | host has read the block; restart it |
| `rd_addr` / `rd_data` | in / out | log2 DEPTH / NUM_DET | host read port |
| `full`, `fill`, `dropped` | out | 1, log2 DEPTH + 1, 1 | block state |

After synthesis the design is 35 flip-flops, one latch and a 16 kbit memory.

## How far to trust it

* The loop is asynchronous, as in the original. The FFD and the flags are
  clocked by the detectors. Q feeds the counter enable and the clock-gate latch
  without synchronizers. The design works only if the click arrives inside the
  period after its trigger (step 2 above), well before the next rising edge.
  In practice this holds because the detector only clicks in response to a
  gate. A click arriving near a clock edge could make the counter enable
  metastable. This was not analysed.
* EQ clears the FFD and the flags asynchronously in the same period in which
  the memory samples the flags for M = 1. Correct operation depends on the
  clock-to-output plus comparator delay exceeding the memory's hold time,
  which is normal for flip-flops on one clock.
* The simulations are zero-delay, apart from a 36 ns detector response and
  10 ns pulses in the detector model. Analog limits (26 MHz maximum rate,
  cable delays) are not modelled.
* Standard triggering (disabling switched off), which the original uses for
  comparison, is not built.
* `rst_n` clears the FFD, the flags, the counter and the block, and also holds
  the trigger off. A click during reset could not start a dead time, so no gate
  is sent then.

## Simulation

Every testbench is self-checking. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog.
`tb/spad_model.sv` is a behavioural gated-detector model: a click probability
per gate, a response delay and a dead time. It also counts gates that arrive
while the detector is blind. Verilator is a two-state simulator and starts
flip-flops at random values. An asynchronous reset acts only on its edge, so
each testbench drives `rst_n` high and then low at time zero.

| Testbench | What it shows |
|---|---|
| `tb_td_ffd`, `tb_click_capture` | set by either detector or by its own detector; hold; clear dominates; random sequences checked against a reference |
| `tb_dt_counter`, `tb_cmp_eq` | random enable/clear and operand sequences checked against a reference |
| `tb_clk_buf_ce` | enable changed at random in both phases; each pulse passed or blocked whole, never cut |
| `tb_cache_mem` | fill, full, overflow drops, read-back, release and refill (depth 32) |
| `tb_td_acq_top` | **all defaults.** Two detectors at 4 MHz under bright light (click probability 0.18 each), M = 20. It fills one 8192-word block, then checks that no gate reached a blind detector and that exactly M triggers were suppressed after each click and none otherwise. Every stored word must match the clicks seen. It also covers coincidences, full, drops and release. The single-click string must alternate about half the time (0.505 is typical), not close to always. |
| `tb_workload_single` | one detector, mean photon number 0.1, efficiency 0.1, M = 20, three 8192-word blocks. 100 % of stored triggers are useful, against about 83.4 % predicted for standard triggering. The ones stored match the detector's clicks. |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/td_pkg.sv tb/tb_td_acq_top.sv --top-module tb_td_acq_top -o sim
./obj_dir/sim
```

Replace the testbench file and `--top-module` to run another one. Verilator
finds the other modules in `rtl/` and `tb/` by their file names; only the
package has to be named first. The full-size end-to-end test takes well
under a second.

To change the design: the blocking time is the `cmp_value` input, not a
parameter. `NUM_DET` and `DEPTH` scale the memory. To add time stamps to the
stored words, widen `wdata` in `cache_mem` and feed it a counter on
`clk_src`.
