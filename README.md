# A multi-channel Vernier ring-oscillator TDC for FPGAs, in SystemVerilog

A time-to-digital converter (TDC) stamps the arrival time of a pulse (a
"hit") with a resolution far below one clock period. This design reaches
about 27 ps on a 600 MHz FPGA clock (1667 ps period) with two techniques:

- **A two-step measurement.** A 9-bit counter of system clock cycles gives
  the coarse time. The short interval between the hit and the next usable
  clock edge is measured by a fine interpolator.
- **A Vernier ring-oscillator interpolator.** Two ring oscillators (ROs),
  built from FPGA carry chains, have slightly different periods, about
  4.83 ns and 4.81 ns. The slow one is started by the hit and the fast one
  by the clock edge. The fast pulse gains on the slow pulse by the period
  difference Δτ on every lap. The number of laps n until it catches up
  measures the interval in steps of Δτ.

Each channel produces a 16-bit timestamp: the 9-bit coarse count above a
7-bit lap count. The top level puts 32 such channels side by side. A hit at
time t gives a timestamp {C, n} with

    t = C · T_clk − n · Δτ + constant

The constant is the same for every channel that uses the same tuning. It
cancels when two timestamps are subtracted, which is how a TDC is normally
used.

The circuit relies on placement and routing delays. It cannot be built from
portable logic alone, so part of this RTL is behavioural. The section
*What is logic and what is a model* says exactly which part.

## Signal flow of one channel

```
 hit ──► clock_extraction ──hit_syn──►┐
            │  (2 flip-flops,         │   fine_time_interpolator
            │   delay units τ1, τ2)   ├─clk_syn──► slow RO / fast RO ─► phase sampler (En)
            │                         │                 │                    │
            └──ctrl_1──────────┐      │         fine counter (n) ◄───────────┘
 clk ──► coarse_counter ──C──► time_assembler ◄──ctrl_2── ctrl2_generator ◄── En
                                  │    └──clear──► (stops both ROs, zeroes En and n)
                                  └──► ts = {C, n}, ts_valid, ts_timeout
```

1. **Clock extraction.**
   - The hit is sampled by two flip-flops in series, both on the system
     clock. The output of the second flip-flop is delayed by a
     *delay compensation unit* (τ2) and becomes `clk_syn`.
   - `ctrl_1` is the same node as `clk_syn`.
   - The hit is delayed by a second compensation unit (τ1) and becomes
     `hit_syn`.
   - `hit_syn` always leads `clk_syn` by the fine interval
     T = τd + (the time from the hit to the next clock edge). τd is a small
     trimmed offset, explained below.
2. **Coarse latch.** On the first clock edge after `ctrl_1` rises, the time
   assembler stores the coarse count. That count belongs to the edge that
   launched `clk_syn`.
3. **Vernier race.**
   - `hit_syn` starts the slow RO and `clk_syn` starts the fast RO.
   - The phase sampler is a flip-flop. The fast RO's carry-chain output
     clocks it, and the slow RO's carry-chain output is its data.
   - While the fast pulse still lags, the flip-flop samples the slow pulse
     high, so En = 1. The fine counter, clocked by the slow RO, counts laps
     while En is high.
   - When the fast pulse has caught up, the flip-flop samples 0, En falls and
     n freezes.
4. **Fine latch.** En is synchronised into the clock domain by two
   flip-flops. Its falling edge gives a one-cycle `ctrl_2`, two to four clock
   cycles after En falls. The time assembler then outputs `{C, n}` with
   `ts_valid` for one cycle.
5. **Clear.**
   - The time assembler holds `clear` for 6 cycles (10 ns).
   - `clear` switches each RO's feedback multiplexer to ground, which kills
     the pulse in flight. It also resets En and n asynchronously.
   - 10 ns is longer than one lap plus one reshaped pulse (5 + 2 ns). A
     shorter clear (4 cycles) let part of a pulse back into the loop in
     simulation.
6. **Dead time.** From `ctrl_1` until the clear ends, new hits are ignored.
   This lasts at most about 0.7 µs.

If `ctrl_2` does not come within 400 cycles (667 ns), the channel still
emits a timestamp and sets `ts_timeout`. With 7 bits the counter saturates
at 127 laps (about 614 ns), so 400 cycles is enough for any normal
measurement. In practice a timeout means the RO pair is so badly tuned that
the fast RO never catches up in time.

## The two timing rules that make it work

### The clock edge must fall inside the hit pulse

The one-shot reshaper at each RO input turns `hit_syn` and `clk_syn` into
pulses of fixed width T_pos (2 ns here). The race only starts correctly if
the fast RO's first pulse lands on the slow RO's first pulse. That requires

    0 ≤ τd ≤ T_pos − T_clk,     τd = T_clk + τ_reg + τ2 − τ1

T_clk appears in τd because `clk_syn` leaves the second flip-flop one clock
after the capturing edge.
- If τd is negative, some hits start the fast RO before the slow one.
- If τd is too large, the fast pulse first lands after the slow pulse has
  ended.

In hardware, each case shows up as a characteristic histogram of n:
- all zeros;
- zeros mixed with the normal range;
- the normal range extended down to 0.

The designer then trims the length of the NOT-gate chains, one gate at a
time, until the histogram is a clean range (n0, nm) with the smallest
possible n0.

The defaults are:
- τ1 = 22 gates × 80 ps = 1760 ps;
- τ2 + τ_reg = 2 × 80 + 100 = 260 ps;
- τd = 167 ps, inside the 0…333 ps window.

The per-gate delay and τ_reg are this model's own values. The rule itself
and the 32-gate units are from the original design.

### The period difference comes from a measured table, not from arithmetic

Each RO runs through a 32-cell carry chain, cut after cell i (fast RO) or j
(slow RO). The routing after the cut depends on the cut position, so the RO
period is not a linear function of the tap. Instead of measuring all
256 pairs, the tuning procedure records only 32 periods:
- the fast RO at each tap i while the slow RO stays at tap 32;
- the slow RO at each tap j while the fast RO stays at tap 32.

The period difference of any pair then follows from

    Δτ(i, j) = Δτ(i, 32) + Δτ(32, j) − Δτ(32, 32)

`tdc_pkg` holds the recorded differences of the published channel No. 1 for
taps 17…32. It builds the RO periods from them:
- τ_s(j) = 5000 ps + Δτ(32, j);
- τ_f(i) = 5000 ps + Δτ(32, 32) − Δτ(i, 32).

This reproduces the identity exactly.

The default pair (25, 30) gives Δτ = 27 ps: τ_f = 4805 ps and
τ_s = 4832 ps. For comparison, that physical channel measured 30.3 ps, with
codes 9…64 over one clock period. In this model a clock period spans about
62 codes, and the codes run from about 5 to 66.

Taps below 17 have no recorded data, and a tap pair outside 17…32 stops
elaboration with an error. A tap pair with a negative or tiny Δτ is legal
but useless:
- with a negative Δτ, the fast RO falls further behind, and En falls only when
  the fast edge drops out of the slow pulse, so the count is meaningless;
- with a Δτ of about 2 ps, such as (21, 29), most measurements end in a
  timeout.

## What is logic and what is a model

| Module | Kind | What it is |
|---|---|---|
| `coarse_counter` | logic | 9-bit wrapping counter, synchronous reset |
| `phase_sampler` | logic | flip-flop with asynchronous clear (En) |
| `fine_time_counter` | logic | 7-bit counter with enable, saturates at 127, asynchronous clear |
| `ctrl2_generator` | logic | 2-flop synchroniser and falling-edge detector |
| `time_assembler` | logic | 3-state controller (IDLE, WAIT_FINE, CLEAR), timestamp register, timeout |
| `clock_extraction` | logic and model | the two sampling flip-flops are logic; τ1 and τ2 are delay models |
| `delay_comp_unit` | model | NOT-gate chain as a transport delay N × 80 ps |
| `carry_chain` | model | tapped carry chain as a transport delay |
| `pulse_width_reshaper` | model | one-shot: flip-flop whose output, delayed by T_pos, clears it |
| `ring_oscillator` | model | reshaper → OR → carry chain → reshaper → feedback multiplexer |
| `fine_time_interpolator` | structure | two ROs, sampler, counter, ctrl_2 generator |
| `tdc_channel`, `tdc_top` | structure | one channel; 32 channels with per-channel tuning arrays |
| `transport_delay` | helper | event queue that passes every edge after a fixed delay |

The delay models use `transport_delay`. That module keeps a queue of pending
edges, so a delay longer than the pulse width still passes every edge. This
matters:
- an RO loop holds one 2 ns pulse in a 5 ns loop;
- a compensation unit passes a 3 ns hit through 1.76 ns of delay.

On an FPGA these models stand for hand-placed cells with hand-edited
routing. A synthesis tool cannot infer them. Porting the design means
instantiating vendor primitives (LUTs and carry cells) with placement
constraints, and re-running the trimming described above.

The reshaper's flip-flop drives its own asynchronous clear through the
T_pos delay. A static checker reports this as a combinational loop. It is
the one-shot itself.

## Parameters worth changing

| Where | Parameter | Default | Meaning |
|---|---|---|---|
| `tdc_top` | `NUM_CH` | 32 | channels |
| `tdc_top` | `HIT_GATES[c]`, `CLK_GATES[c]` | 22, 2 | gates used in τ1 and τ2 of channel c (max 32) |
| `tdc_top` | `FAST_TAP[c]`, `SLOW_TAP[c]` | 25, 30 | carry-chain cut points of channel c (17…32) |
| `fine_time_interpolator` | `TREF_PS` | 5000 | period of the fast RO at tap 32 |
| `ring_oscillator`, reshaper | `TPOS_PS`, `TDFF_PS` | 2000, 100 | pulse width and flip-flop delay |
| `time_assembler` | `CLEAR_CYCLES`, `TIMEOUT_CYCLES` | 6, 400 | clear length and timeout |

The timestamp type is `tdc_pkg::timestamp_t`, a packed struct
`{coarse[8:0], fine[6:0]}`. To convert a timestamp to time, use
`C·1667 ps − n·Δτ(i, j)` and take the difference between two timestamps. The
result wraps every 512 × 1667 ps = 853 ns.

## Where this departs from the original design

- **Cases where the clock edge misses the hit pulse.** In the original
  hardware these cases read n = 0. In this model the fast RO keeps running
  after it misses the slow pulse. About T_pos/Δτ ≈ 74 laps later it meets
  the next slow pulse from the other side, so the model reads n ≈ 73 there.
  The exact cause of the hardware's behaviour is not given, so it is not
  imitated. The operating case, with τd inside the window, behaves as
  described above.
- **Coarse count.** The coarse count is that of the edge that launched
  `clk_syn`, one cycle after the capturing edge. This is a constant offset.
- **Added controller logic.** The timeout, the fixed clear length, the
  counter saturation and the dead-time behaviour are this design's own
  choices. The original description names `ctrl_1`, `ctrl_2` and `clear`
  but does not give the controller.
- **Ideal delays.** All delays are ideal and free of jitter. Resolution
  spread between channels, DNL/INL and the 32…40 ps single-shot precision
  of real silicon are not reproduced.
- **Not included.**
  - The USB readout to a PC: timestamps are output ports.
  - The per-channel hit delay chains used for the multi-channel test:
    `tb/hit_delay_module.sv` is a testbench model of them.
  - The tuning search itself: it is a design-time procedure.
    `tb_pdr_search` runs it over the recorded table.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. With Verilator 5, for example:

```
verilator --binary --timing -Wno-fatal --top-module tb_tdc_top \
    -y rtl -y tb +libext+.sv rtl/tdc_pkg.sv tb/tb_tdc_top.sv
./obj_dir/Vtb_tdc_top
```

All files use `` `timescale 1ps/1fs ``, and the delays are `real`
picoseconds.

| Testbench | What it shows |
|---|---|
| `tb_fine_time_interpolator` | RO periods; n across a 40-point sweep of the input gap against an independent edge-replay model; ctrl_2 latency; the miss cases; clear stops both ROs |
| `tb_tdc_channel` | 300 hits at random phases: every timestamp reconstructs the hit time to within ±3 LSB; fine codes span about 62 codes; the coarse counter wraps |
| `tb_tdc_top` | 4 channels fed one hit through 40/58/76/100-gate delays. Checks intervals between channels and counts each mechanism: normal measurement, timeout (channel 3 tuned to Δτ = 2 ps), coarse wrap, a second hit ignored during dead time |
| `tb_tdc_full` | the top at its defaults: 32 channels, 20 common hits, every channel-to-channel interval within ±3 LSB |
| `tb_pdr_search` | runs the tap-pair search over the 16 × 16 table (5 pairs fall in 25…35 ps) and measures the chosen pair's ROs in simulation |
| `tb_<block>` | one per block: counters, sampler, synchroniser, assembler, delay models, reshaper, RO |

The full 32-channel run simulates 25 µs in a few seconds. Simulation time is
dominated by the RO edges: every running RO creates about two events per
5 ns.
