# Real-time photon-counting receiver for a SiPM optical link

A silicon photomultiplier (SiPM) is an array of single-photon avalanche diodes. Every detected photon
gives a short current pulse (about 8 ns wide at the standard output of a 1 mm² device). At low data
rates, a link can then treat light as a stream of countable events instead of an analog signal:

- The transmitter sends on-off keyed (OOK) data: the LED is on for a 1 and off for a 0.
- The receiver counts the photon pulses that arrive in each bit period and decides 1 when the count
  exceeds a small integer threshold `n_t`.
- Dark counts of the detector (about 35 kcps here) put a floor under the 0s.
- Poisson statistics put a floor under the 1s. About 6 to 8 detected photons per bit already give an
  error ratio near 10⁻³.

This RTL is the digital half of such a link. It was built as a test system for an FPGA board with the
LED transmitter and the SiPM receiver on the same board, so it holds both ends:

- **Transmitter:** a bit clock and a PRBS source that drives the LED.
- **Receiver:** it counts the comparator's digital pulses per bit, decides each bit, compares it with
  the transmitted one, and every second reports to a host PC over a UART how many bits, errors and
  photons it saw.

Two ideas make the receiver cheap and give it no dead time:

1. **Counting needs no fast clock.** The photon counters are clocked by the detector pulses
   themselves, not by sampling the input at hundreds of MHz.
2. **Counting never stops.** Two counters take turns: while one counts the current bit, the other
   hands over the previous bit's count and is cleared.

The analog parts stay outside the RTL: the SiPM, the RF amplifiers, the comparator that turns
amplified pulses into logic pulses, and the LVDS line driver and LED buffer. The RTL meets them at two
pins, `pulse_in` (comparator output) and `tx_out` (LED data).

```
             bit_div            phase
               |                  |
clk --> rate_divider --tx_tick--> phase_shift --rx_tick--------------------+
               |                                                           |
               +--> prbs_gen / pattern_001 --> tx_out (to LED driver)      |
               |                                 |                         |
               +--> tx_delay_line <--------------+                         |
                        | ref_bit                                          v
pulse_in --------------------------------------------> interleaved_counter (2 x pulse_counter)
                        |                                   | bit_count, count_valid
                        |                     +-------------+--------------+
                        |                     v                            v
                        |               bit_decision (count > n_t)   full_photon_counter
                        |                     | rx_bit                     |
                        +-----> bit_compare <-+                            |
                                 (2 FFs + XOR)                             |
                                      | err                                |
                                 error_counter                             |
                                      |                                    |
                                      +--------> uart_reporter <-----------+
                                                  (1 s interval, frame) --> uart_txd
```

## Counting photons without a sampling clock

This is the part of the design that departs most from ordinary synchronous logic. It is also the
part a user most needs to understand before changing clocks or rates.

### The pulse-clocked counter (`pulse_counter`)

The counter's clock pin is `pulse_in`. Every rising edge of a comparator pulse adds one while `en` is
high. The count saturates at all ones. `clr` is an asynchronous clear driven from the system clock
domain. The cost is a circuit with two clock domains:

- the counter register lives in the pulse domain;
- everything that reads it lives in the `clk` domain.

This is safe only because of how the two counters are scheduled.

### Ping-pong scheduling (`interleaved_counter`)

A register `bank` in the `clk` domain selects which of the two counters is enabled. For a bit window
that closes on `rx_tick`, the sequence in `clk` cycles is:

| clock edge | what happens |
|---|---|
| E0, the edge that samples `rx_tick` | `bank` flips. The other counter now takes the pulses of the new bit. |
| E1 … E`SETTLE` (`SETTLE` = 2) | Wait. Any pulse edge that came just before the flip and still saw the old `bank` has finished its increment. |
| E`SETTLE` | The idle counter is copied to `bit_count`, and `count_valid` is high for one cycle. |
| E`SETTLE`+1 | `clr` of the idle counter rises and stays high for one cycle. |
| … | The idle counter waits, cleared, until the next `rx_tick` enables it. |

So a counter is read only while it is disabled. Its value cannot change while it is copied into the
`clk` domain, so no synchronizer for a multi-bit value is needed.

After reset, both counters get one explicit clear pulse: `clr` rises in the first cycle after reset
is released. Without it, an edge-modelled asynchronous clear that never sees a rising edge would leave
the counters at whatever they powered up with.

Limits that follow from this scheme:

- **Bit period.** The bit period must be longer than `SETTLE` + 3 cycles. An assertion (`a_period`)
  fires if a new boundary arrives while a read is still pending. In practice the bit period is 125 to
  12,500 cycles.
- **Boundary ambiguity.** A pulse whose rising edge lands within a few ns of the `bank` flip may be
  counted in either window, because the enable is asynchronous to the pulse clock. The total is
  exact; only the window it lands in is uncertain. At 1 Mbps a window is 1 µs and a pulse 8 ns, so the
  effect on the error ratio is marginal.
- **Counter width.** `CNT_W` is 16 bits. That covers the 12,500 pulses of 8 ns that at most fit
  into one 100 µs bit at 10 kbps.
- **Pulse-rate limit.** How close together two pulses may be and still both count depends on the
  flip-flop timing of the target device, not on this RTL. The original hardware lost counts once
  pulses started to overlap, which happened once the optical power rose above the level needed for 1 Mbps.

## Bit timing: rate, phase and reference delay

`rate_divider` makes `tx_tick`, one cycle every `bit_div` clocks. At the assumed 125 MHz clock:

| rate | `bit_div` |
|---|---|
| 1 Mbps | 125 |
| 100 kbps | 1250 |
| 10 kbps | 12500 |

With 16 bits the slowest rate is about 1.9 kbps.

On each tick the PRBS-7 generator (x⁷ + x⁶ + 1, seeded with all ones) steps, and `tx_out` takes the
new bit one cycle later.

The light that a bit produces reaches `pulse_in` later than `tx_out` changes. The delay is the sum of
the line driver, the LED, the amplifiers and the comparator. `phase_shift` therefore moves the
receive boundaries: `rx_tick` comes `phase` + 1 cycles after `tx_tick`. Set `phase` to the link delay
in clock cycles. It must stay below `bit_div` − 6.

A bit's count is known only after its window closes, about one bit after it was sent. By then `tx_out`
carries the next bit. `tx_delay_line` keeps the last 8 line bits, and `bit_compare` compares the
recovered bit with the bit sent `delay_sel` + 1 bits earlier. With the scheme above, `delay_sel` = 0
is correct whenever `phase` is below `bit_div` − 6. Larger values absorb extra latency if the
receive windows are moved by more than a bit.

Latency of one bit, counted from the cycle in which the `rx_tick` that closes its window is high:

| cycles later | event |
|---|---|
| 3 | `count_valid` / `bit_count` |
| 4 | `rx_bit_valid` / `rx_bit` (`bit_decision`) |
| 5 | `err_valid` / `err` (`bit_compare`) |

The first 9 compared bits after reset (`DEPTH` + 1) are not counted as bits or errors, because the
reference history is not yet filled.

## Deciding a bit

`bit_decision` outputs 1 when `bit_count > n_t`. The strict comparison matters at `n_t = 0`: a 0 is
then wrong as soon as a single dark count arrives.

- At 100 kbps with 0.35 dark counts per bit, this predicts an error ratio of about
  ½·(1 − e^−0.35) ≈ 0.15 at `n_t = 0`, which is what the measured threshold sweep of the original
  system shows.
- A ≥ comparison would make `n_t = 0` give a constant 1 and an error ratio of 0.5.

`n_t` is 4 bits wide (0–15), the range over which the threshold was swept.

## Totals and the report frame

`error_counter` counts compared bits and errors. `full_photon_counter` adds every per-bit count. Both
hand over their totals on `snap` and restart from zero. An event in the same cycle as `snap` goes into
the report being closed. All totals are 32-bit and saturating.

`uart_reporter` raises `snap` every `REPORT_CYCLES` (125,000,000 cycles, i.e. 1 s). It then sends one
frame, 8N1 at 115,200 baud (`CLKS_PER_BAUD` = 1085), most significant byte first:

| byte | content |
|---|---|
| 0 | header `0xA5` |
| 1–4 | bits compared in the interval |
| 5–8 | bit errors |
| 9–12 | photon pulses counted |

A frame takes 1.13 ms. A frame still in flight at the next `snap` makes that report be dropped, which
cannot happen at the defaults. The same record is held on the `report` output (`sipm_pkg::report_t`).

Longer measurements are sums of 1 s reports on the host. For example, 100 s at 1 Mbps gives 10⁸
bits, enough to resolve an error ratio of 10⁻⁶.

## Loop-back mode

With `mode = MODE_LOOPBACK`, `tx_out` carries the repeating pattern 001, one slot per clock cycle,
instead of the PRBS. The bit clock keeps running only to pace the counting windows. Wiring `tx_out`
back to `pulse_in` through the board connector then measures whether pulses one clock period wide
survive the connector: the photon total of a report should be one third of `REPORT_CYCLES`. This is
how the connector's narrowest usable pulse (about 5 ns) was found. To sweep the width, change the
frequency of `clk`. At the default 125 MHz the pulses are 8 ns. The error totals mean nothing in this
mode.

## Top-level interface (`sipm_rx_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | system clock, asynchronous active-low reset |
| `pulse_in` | in | 1 | comparator output; its rising edges are counted |
| `mode` | in | `tx_mode_e` | `MODE_PRBS` or `MODE_LOOPBACK` |
| `bit_div` | in | 16 | clock cycles per bit (> `phase` + 6) |
| `phase` | in | 16 | receive-window offset in cycles |
| `delay_sel` | in | 3 | reference delay minus one bit (0 normally) |
| `n_t` | in | 4 | digital threshold |
| `tx_out` | out | 1 | data to the LED driver |
| `uart_txd` | out | 1 | report frames to the host |
| `rx_bit`, `rx_bit_valid` | out | 1 | each recovered bit |
| `rx_bank` | out | 1 | which counter is counting |
| `bit_tick` | out | 1 | start of each transmitted bit (`tx_out` changes one cycle later) |
| `report`, `report_snap`, `report_busy` | out | 96, 1, 1 | last report, end of interval, frame in flight |

The configuration inputs should be static during a measurement. Apply a reset after changing
`mode`.

Parameters, with their defaults: `SYS_CLK_HZ` = 125 MHz, `CNT_W` = 16, `NT_W` = 4, `DIV_W` = 16,
`DEPTH` = 8, `REPORT_CYCLES` = `SYS_CLK_HZ`, `CLKS_PER_BAUD` = `SYS_CLK_HZ`/115200.

## What follows the original system and what is this design's own

**Taken from the description of the original FPGA receiver:**

- the block structure: clock division, a phase stage, PRBS, reference delay, recovery, two
  flip-flops and an XOR, error counter, two counters feeding a full photon counter, UART;
- counters triggered by the rising edges of the SiPM pulses;
- two counters used alternately, so there is no dead time;
- the decision by a digital threshold 0–15;
- a report every second;
- the 001 loop-back pattern;
- the data rates 10 kbps to 1 Mbps.

**This design's own choices.** The description gives no details for any of these:

- the 125 MHz clock;
- PRBS-7 and its seed;
- all counter widths and saturation;
- the `SETTLE` read/clear timing;
- the strict `count > n_t` rule;
- the reference-delay depth;
- the UART rate and frame;
- the start-up bits left uncounted;
- running the loop-back pattern at one slot per clock.

**Departures from the original:**

- The original block diagram places a clock multiplier/divider and a phase block in the clock path.
  Here both are counters that make one-cycle enable strobes on the single system clock. Apart from
  the pulse-clocked counters, the whole design therefore lives in one clock domain.
- In that diagram the phase block sits before the PRBS and clocks the two comparison flip-flops.
  Here the PRBS runs on the unshifted bit strobe, and the phase offset moves the receive windows
  instead. Only the offset between sending and counting matters, so the two are equivalent.
- The original link from the FPGA to the transmitter board is differential (LVDS). Here `tx_out` is
  a single-ended logic output; an LVDS output buffer, if needed, goes around it at the FPGA pins.
- The comparator's threshold and hysteresis are set on the analog board and are not modelled.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. The system-level tests are:

| testbench | what it runs | time |
|---|---|---|
| `tb_sipm_rx_top` | Reduced sizes: 40-cycle bits, 20,000-cycle interval. (1) PRBS mode with a random channel model, pulses reach `pulse_in` 3 cycles late and `phase` = 3; every recovered bit and every UART frame is checked exactly. (2) Loop-back mode. It also checks that both banks alternate, that missed 1s and false 1s both occur, and that the 001 pattern is exact. | < 1 s |
| `tb_workload_rates` | 10 kbps, 100 kbps and 1 Mbps at realistic photon numbers, plus an `n_t` sweep 0–15 at 100 kbps. It checks exact reports and the bathtub shape: ≈0.15 at `n_t` = 0, a minimum of about 1.5·10⁻³ near `n_t` = 3, rising above it. The report interval is shortened to 20 ms. | ≈ 30 s |
| `tb_workload_loopback` | Loop-back mode with the clock period swept from 3 to 7 ns, through a connector model that drops pulses narrower than 5 ns. Every full 30,000-cycle report must hold exactly 10,000 photons at 5–7 ns and none at 3–4 ns. | < 1 s |
| `tb_sipm_rx_top_full` | All defaults: 125 MHz, 1 s interval, 115,200 baud. One full second at 1 Mbps with about 7.9 photons per 1 and 0.035 dark counts per bit, `n_t` = 1. The first frame is checked exactly. Observed: 999,990 bits, about 1.4·10⁻³ error ratio. | ≈ 75 s |

The channel models (pulse probabilities, pulses 6 ns wide on a grid of every other clock cycle) belong to the testbenches. They
are not measured detector behaviour. They generate non-overlapping pulses away from the window edges,
so the exact checks never depend on the boundary ambiguity described above.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_sipm_rx_top -y rtl -y tb +libext+.sv -Irtl \
  rtl/sipm_pkg.sv tb/tb_sipm_rx_top.sv
./obj_dir/Vtb_sipm_rx_top
```

Lint with `verilator --lint-only -Wall -y rtl -Irtl rtl/sipm_pkg.sv rtl/<module>.sv`. The remaining
warnings are:

- `SYNCASYNCNET`: `rst_n` is used by assertions as well as by flip-flops, and `clr` is both an
  asynchronous clear and a flop output;
- `UNUSEDPARAM`: package constants that some modules do not use.

## How far to trust it

- **What has been simulated:** the logic is checked cycle-exactly against independent models, at the
  default sizes as well as reduced ones.
- **What has not been exercised:** the two-domain counter has not been timed on hardware. Its safety
  rests on the read-while-disabled schedule above. Any port to real silicon needs:
  - constraints that treat `pulse_in` as a clock;
  - the counter enables as asynchronous paths;
  - the `clr` nets as asynchronous resets.
- **What the receiver cannot change:** the bit error ratios it reports depend on the optical power,
  the dark count rate, and how well `phase` and `n_t` are chosen.
