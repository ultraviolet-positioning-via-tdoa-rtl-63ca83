# UV TDOA positioning: transmitter and receiver RTL

A receiver can find where it is if three beacons at known places send the
same signal at known times. Time it, and it gets the *differences* of its
distances to the beacons. Each difference puts the receiver on a hyperbola
with two beacons as foci, and two hyperbolas meet at its position. That is
time-difference-of-arrival (TDOA) positioning. Here the beacons are deep-UV
LEDs (266 nm), and the receiver is a photomultiplier tube (PMT) that counts
single photons. Sunlight at that wavelength is almost entirely absorbed high
in the atmosphere, so the channel is nearly dark. The signal is weak but
clean, and arrives as a sparse stream of photon pulses.

The system works like this:

* **Transmitters A, B and C.** Each has its own atomic clock disciplined by
  satellite time, giving a 10 MHz clock and a pulse-per-second (PPS). On
  each PPS, A sends a 256-symbol on-off-keyed pilot. B sends the same pilot
  one slot `T = 300 us` later, and C two slots later.
* **Receiver.** It samples the PMT at 100 MHz, counts photon pulses, and
  correlates the counts against the known pilot to find when each pilot
  arrived. It subtracts the known slot offsets, giving the flight-time
  differences `t_BA` and `t_CB`, and sends them over a serial line to a PC.
* **PC.** It solves the two hyperbola equations for the position:

      r21 = |P - B| - |P - A| = c * t_BA
      r32 = |P - C| - |P - B| = c * t_CB

This repository has the FPGA logic of both ends in SystemVerilog. That
covers the transmitter scheduler and pilot generator, and the receiver's
pulse counter, pilot synchroniser, time-difference unit and serial reporter.
It also has testbenches that run the whole chain, from PPS to serial bytes,
at full size. The atomic clocks, timing receivers, LEDs, optical channel,
PMT, ADC and PC software are outside the RTL. The testbenches model them.

The unit of time in the receiver is the **chip**: one 10 ns ADC sample. At
1 Mbps a pilot symbol lasts 1 us = `n = 100` chips, and a slot lasts
`T = 30,000` chips. One chip of timing error is 3 m of range difference.

## Block map

```
  transmitter i = A, B, C  (uv_tx, 10 MHz clk_10m[i])
    pps[i] -> tx_time_division -> tx_frame_construction -> led_on[i] -> UV LED
              (start at slot i*T)  (OOK pilot, 1 us/symbol)
                                                                   |  free-space UV
                                                                   v
  receiver  (uv_rx, 100 MHz clk_rx)                           PMT -> ADC
    adc_data -> rx_pulse_counter -> rx_sync -----------------> rx_time_difference
                (pulses per chip)   (rx_correlator +           (rounds A,B,C;
                                     peak search)               t_BA, t_CB)
                                                                   |
                                      uart_txd <- rx_serial_report <- (uart_tx)
```

| File | Role |
|---|---|
| `rtl/uvpos_pkg.sv` | Constants, the pilot sequence function, the `peak_t` and `tdoa_t` types |
| `rtl/tx_time_division.sv` | PPS synchroniser, and the slot timer that issues `frame_start` |
| `rtl/tx_frame_construction.sv` | Sends the OOK pilot, 10 ticks per symbol |
| `rtl/uv_tx.sv` | One transmitter, with the slot as a strap input |
| `rtl/rx_pulse_counter.sv` | Turns ADC samples into photon pulses per chip |
| `rtl/rx_correlator.sv` | Incremental sliding correlator, one output per chip |
| `rtl/rx_sync.sv` | Correlator, threshold, arg-max search window and blanking |
| `rtl/rx_time_difference.sv` | Groups peaks into rounds A, B, C and forms `t_BA`, `t_CB` |
| `rtl/uart_tx.sv` | 8N1 serial transmitter |
| `rtl/rx_serial_report.sv` | 10-byte result frame to the PC |
| `rtl/uv_rx.sv` | The receiver chain |
| `rtl/uv_tdoa_top.sv` | Three transmitters and one receiver. The analog path between them is left as ports. |

`uv_tdoa_top` has these ports:

* **Transmitters:** `clk_10m[2:0]`, `pps[2:0]` and `tx_rst_n[2:0]` per
  transmitter. `led_on[2:0]` drives each LED; `tx_busy[2:0]` is high while a
  pilot is being sent.
* **Receiver inputs:** `clk_rx`, `rx_rst_n`, the ADC bus
  `adc_data[ADC_W-1:0]`, and two run-time thresholds, `adc_thresh` and
  `corr_thresh`.
* **Receiver outputs:**
  * `uart_txd`, the serial line to the PC.
  * Observation strobes and values for the status of each stage:
    `peak_valid`/`peak`, `res_valid`/`res`, `round_dropped`, `extra_peak`,
    `report_busy` and `report_dropped`.

The four transmitter and receiver clocks are mutually asynchronous.

## Transmitter: slots and pilot

**Time division.** `tx_time_division` passes the PPS through two flip-flops
into the 10 MHz domain and detects its rising edge, which starts a tick
counter. When the counter reaches `tx_slot * 3000`, the block pulses
`frame_start`. The counter then stops until the next PPS. A PPS that arrives
mid-round restarts the schedule. The latency from the PPS to the first LED
symbol is the same in every transmitter (three ticks), so it cancels in the
differences. What does not cancel is where each atomic clock's 10 MHz edge
falls relative to the PPS. That misalignment is uniform over 0 to 100 ns and
dominates the positioning error of the whole system. In the workload
testbench, the mean error over the simulation grid is 12 m with these clock
edge errors, against 1 m with aligned clocks.

**Pilot.** `tx_frame_construction` holds `led_on` at pilot bit `s_i` for 10
ticks (1 us) per symbol, for 256 symbols (256 us). That leaves 44 us of
silence before the next slot. A start pulse that arrives while a pilot is
being sent is ignored.

The pilot is produced by `uvpos_pkg::pilot_seq()`. It is the 255-bit
maximal-length sequence of the LFSR `x^8 + x^6 + x^5 + x^4 + 1`, starting
from state 1, followed by a single 0. This gives:

* **Balance.** It has exactly 128 ones and 128 zeros, so with ±1 weights
  the correlation of a constant background is zero.
* **A sharp peak.** The largest aperiodic autocorrelation sidelobe is 17,
  against a peak of 256.
* **Compactness.** It is computed at elaboration time, so no table is
  stored.

All three transmitters use the same pilot.

## Receiver front end: counting photons

A PMT turns each photoelectron into a pulse a few nanoseconds wide. The PMT
cannot resolve a second photon for about 10 ns, which is why sampling at
100 MHz is enough. `rx_pulse_counter` counts a pulse when an ADC sample
reaches `adc_thresh` while the previous sample was below it (a rising
crossing). A pulse that spans two samples is therefore counted once.

Counts are summed over `SAMPLES_PER_CHIP` samples. The default is 1, so a
chip is one sample and its count `N_t` is 0 or 1. The module also works
with several samples per chip, and its testbench checks that mode.

## The incremental correlator

This is the part of the receiver that does the work, and the part whose
hardware form is furthest from the textbook formula.

**What is computed.** Let pilot bit `s_i` map to a weight
`c_{i-1} = 2 s_i - 1` in {+1, -1}. For a candidate start chip `t`, symbol
`i` covers chips `t + n(i-1)` to `t + n·i - 1`. The correlation is

    C(t) = Σ_{i=1..L} c_{i-1} · u_i(t),   u_i(t) = Σ_{j=0..n-1} N_{t + n(i-1) + j}

and the pilot arrival is the `t` that maximises `C(t)`. Equivalently,
`C(t) = Σ_{m=0..Ln-1} w(m) N_{t+m}`, where `w(m) = c_{⌊m/n⌋}` is the pilot
stretched to chip resolution. At full size the window is `L·n = 25,600`
chips long. A new `t` appears every 10 ns. Computing each `C(t)` from
scratch would take 25,600 additions per clock.

**Why one step is cheap.** Moving the window from `t` to `t+1` shifts every
chip one place to the left relative to the weights:

    C(t+1) - C(t) = Σ_{p=0..Ln} N_{t+p} · (w(p-1) - w(p)),   w(-1) = w(Ln) = 0

`w` is constant inside a symbol, so `w(p-1) - w(p)` is non-zero only where
`p` is a multiple of `n`. Those are the `L+1` chips that cross a symbol
boundary (`p = n·k`, `k = 0..L`). Hence

    C(t+1) = C(t) + Σ_{k=0..L} (c_{k-1} - c_k) · N_{t + n·k},   c_{-1} = c_L = 0

Each weight `c_{k-1} - c_k` is in {-2, 0, +2} for inner boundaries, and ±1
at the two ends. About half the inner weights are zero, at every place where
two neighbouring pilot bits are equal. All weights are constants
(`localparam SEQ = pilot_seq()`). Synthesis therefore reduces the update to
an adder tree of about 130 one-bit terms, with no multipliers.

**How it is laid out.** `rx_correlator` keeps the last `L·n + 1 = 25,601`
chip counts in a shift register `line`. The incoming chip goes in at
position 0. A chip that is `Ln - p` chips old, at position `q = Ln - p`, is
`N_{t+p}` for the window being completed. The taps are therefore at
`q_k = L·n - n·k`: tap `k = L` is the incoming count itself, and tap `k = 0`
is the oldest position. `corr` is a 24-bit signed register, because
`|C| ≤ L·n = 25,600 < 2^23`.

`line` and `corr` both reset to zero. Before any chip has arrived, zero is
exactly the correlation of an all-zero history, so the recursion stays equal
to the direct sum from the first chip on. The testbench checks this,
comparing every output against a brute-force sum for a reduced size.

**Indexing.** A chip index counts `chip_valid` strobes from reset, modulo
2^32. When the chip with index `j` has been taken, `corr_valid` rises one
cycle later, with `corr = C(corr_start)` and `corr_start = j - (L·n - 1)`.
This is the start chip of a pilot whose last chip is `j`. Indices are
unsigned and wrap. Only differences of indices are ever used, so the wrap is
harmless, roughly every 43 s.

**Cost.** At the default size, the shift register is 25,601 flip-flops
(or, in an FPGA, shift-register LUTs), and the datapath is one adder tree
and one 24-bit register. The published receiver FPGA reports 96 % of its
LUT-RAM in use, against 1 % in the transmitter. That fits a long sample
history kept in distributed RAM, though its internal structure is not
published. The transmitter needs only counters and the 256-bit pilot
constant. For scale, the published prototype lists 2,463 cells for its
transmitter FPGA design and 2,769 for its receiver. Those counts are
vendor-tool cells for the whole FPGA, clocking and I/O included, and do not
compare directly with a generic synthesis of this RTL.

**What a peak looks like.** With photons detected in a fraction `p` of the
lit chips, a fully aligned pilot gives about `128·100·p` (5,120 at
`p = 0.4`). An offset of `k` chips lowers it roughly linearly over ±n chips,
so the peak is a triangle about two symbols wide, on top of the small
sidelobes of the sequence.

## Peak search and round grouping

The three pilots are identical, so the receiver cannot tell from the signal
which transmitter sent a pilot. Two rules, one in `rx_sync` and one in
`rx_time_difference`, turn the correlation stream into labelled arrival
times using timing alone.

**Finding one peak (`rx_sync`).** A finite-state machine with three states,
`IDLE`, `SEARCH` and `BLANK`:

1. **IDLE.** Wait until `corr >= corr_thresh`. The threshold is a run-time
   input. It must be set above the sidelobe and background level and well
   below the expected peak; the testbenches use 1,500 at full size.
2. **SEARCH.** Follow `SEARCH_WIN = 2n` more correlation values (2 us).
   Keep the largest `C` and its start chip. A later value replaces it only
   if strictly greater, so on a tie the earliest chip wins.
3. **Emit the peak.** `peak_valid` pulses with `peak = {start, value}`.
   This happens `SEARCH_WIN` chips plus two cycles after the threshold was
   first crossed.
4. **BLANK.** Ignore the next `BLANK_LEN = L·n` chips (256 us), then return
   to IDLE.

The window lengths are chosen from the shape of the peak:

* **Search window.** The correlation triangle rises over `n` chips and
  falls over `n` chips. The threshold is crossed on the rising flank, so a
  window of `2n` always contains the top.
* **Blanking.** A blank of `L·n` covers the rest of the pilot's tail, so one
  pilot cannot give two peaks. It is also shorter than the 30,000-chip
  distance to the next pilot, even with the largest delay differences of
  the evaluated layouts (under 100 chips).

The result is the largest `C` in the neighbourhood of each pilot, found
without storing past correlation values. It can differ from a global search
only if noise lifts a value more than `2n` chips after the threshold
crossing above the true peak. By then the window has slid past the
correlation triangle and sits at sidelobe level. At 40 % detection that is a
few hundred counts, against a peak of about 5,000, so it would take
thousands of extra photons.

**Grouping peaks into rounds (`rx_time_difference`).** Each round produces
three peaks, about `T = 30,000` chips apart. Rounds are one PPS apart, so
the gap after C is roughly a second. The rule:

* A peak that comes more than `ROUND_GAP = 1.5 T = 45,000` chips after the
  previous one opens a new round and is taken as **A**. So does the first
  peak after reset.
* The next two peaks are **B** and **C**.
* When C arrives, the unit outputs, one cycle later (`res_valid`):

      t_BA = (t_B - t_A) - T
      t_CB = (t_C - t_B) - T

  These are 32-bit signed values, in chips.
* A round that a gap cuts off after only one or two peaks (a pilot lost to
  blockage or noise) raises `round_dropped` when the next round opens, and
  produces no result.
* A fourth peak inside a round raises `extra_peak` and is ignored. For
  example, a stray PPS restarts transmitter A within the same second.

`ROUND_GAP` must lie between the slot spacing and the round spacing. The
slot spacing is `T` plus the largest delay difference plus the clock error,
so in the evaluated layouts under 30,100 chips. The round spacing is about
10^8 chips. `1.5 T` leaves half a slot (15,000 chips) of margin above the
slot spacing. That is far more than any delay difference or clock error. It
is also far below the round spacing, so a round that loses its last pilot is
still closed by the next PPS.

Worked example, at full size. Suppose the receiver is 25 m closer to A
than to B, and the clocks are ideal. Then:

* A's pilot arrives at chip `t_A`.
* B's pilot arrives at `t_A + 30,000 + 8` (25 m / 3 m ≈ 8 chips).
* The search picks each of these starts, to within a chip or two of noise.
* `t_BA = 8`, and the PC turns that into `r21 ≈ 24 m`.

## Serial report

`rx_serial_report` sends each result as a 10-byte frame through `uart_tx`.
The line is 8N1, with `CLKS_PER_BIT = 868` (115,200 baud at 100 MHz).

| Byte | 0 | 1–4 | 5–8 | 9 |
|---|---|---|---|---|
| Content | `0xA5` | `t_BA`, most significant byte first | `t_CB`, most significant byte first | 8-bit sum of bytes 1–8 |

* **Frame timing.** A frame takes `10 · (10·CLKS_PER_BIT + 1)` cycles
  (0.87 ms), and `busy` is high for that long.
* **Results while busy.** A result that arrives while a frame is being sent
  is dropped, and `dropped` pulses. At the default rates this cannot happen,
  since results come once per second.

The PC reads the two values, multiplies by `c · 10 ns`, and solves the two
hyperbola equations. Solving them is not part of the RTL. The workload
testbench contains a Gauss–Newton solver that plays that role.

## What follows the published system and what is this design's own

Taken from the published system:

* Three transmitters in time division, started by the PPS of
  satellite-disciplined atomic clocks. A 10 MHz transmitter clock.
* OOK pilot of `L = 256` symbols at 1 Mbps, in slots `T = 300 us` apart.
* Photon counting by digital rising-edge detection on ADC samples at
  100 MHz.
* The correlation `C(t) = Σ (2s_i - 1) u_i(t)` with the maximum-peak
  criterion.
* The differences `t_BA`, `t_CB` and the hyperbola equations.
* Sending the differences to a PC over a serial port.
* The transmitter layouts used in the tests.

Choices made in this design:

* **Pilot.** The pilot bits are a padded 8-bit m-sequence. The published
  system does not give its sequence.
* **Chips.** One chip is one 10 ns sample (`n = 100`).
* **Widths.** A 12-bit ADC bus and 32-bit time stamps.
* **Thresholds.** Both thresholds are run-time inputs.
* **Correlator.** The incremental correlator with its delay line.
* **Peak search.** The threshold, search window and blanking form of the
  arg-max.
* **Round grouping.** The gap rule for grouping, and the `round_dropped`
  and `extra_peak` handling.
* **Schedule.** One round per PPS, and a PPS always restarts the schedule.
* **Serial frame.** The frame format, the baud rate, and dropping results
  while busy.
* **Not modelled.** The resource figures of the prototype's FPGA. The
  published system lists utilisation but no internal structure beyond the
  block chain above.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. The two helper
modules are checked through the blocks that use them:

* `rx_correlator`, value by value, in `tb_rx_sync`;
* `uart_tx`, bit by bit, in `tb_rx_serial_report`.

| Testbench | What it checks |
|---|---|
| `tb_uvpos_pkg` | Pilot bits against an independent LFSR model, the balance, the autocorrelation sidelobes, and the constants |
| `tb_tx_time_division` | Slot start times for every slot, PPS restart, and latency in ticks |
| `tb_tx_frame_construction` | Every symbol and its duration, and that a start while busy is ignored |
| `tb_uv_tx` | The whole transmitter from PPS to LED, for slots 0, 1 and 2 |
| `tb_rx_pulse_counter` | Crossing detection and per-chip counts, at 1 and 4 samples per chip |
| `tb_rx_sync` | Every correlation value against a brute-force sum (L = 32, n = 4), and the peak position, search and blanking |
| `tb_rx_time_difference` | The difference formula, new-round gap, dropped rounds, extra peaks and wrap-around |
| `tb_rx_serial_report` | Frame bytes decoded by a model UART, the checksum, frame timing, busy and dropped |
| `tb_uv_rx` | The receiver chain at reduced size, over six rounds with known delays |
| `tb_uv_tdoa_top` | The whole system at default sizes, described below |
| `tb_uv_tdoa_workloads` | The published layouts, described below |

`tb_uart_rx.sv` is the serial receiver model used by the frame checks.

**`tb_uv_tdoa_top`** runs the whole system at the default sizes: random
clock phases, channel delays and photon noise, and a PPS every 1.2 ms. It
runs five rounds:

1. a plain round;
2. a plain round;
3. a round with C dark, which must be dropped;
4. a plain round;
5. a round in which A gets a stray PPS late in the round. The round still
   gives its result, and the stray pilot must appear as an extra peak.

The four results are checked against the applied delays, within 3 chips,
and must arrive in well-formed serial frames. Each mechanism (peak, result,
dropped round, extra peak) is counted, and one that never happens counts as
a failure.

**`tb_uv_tdoa_workloads`** runs the transmitter layouts of the published
evaluation at the default sizes, with flight times at 1 ns resolution:

* **Simulation layout:** A(0,50), B(60,-50), C(-50,-50) m. The receiver
  visits the 81 points of the grid x, y ∈ {-40, -30, …, 40} m, the
  evaluation's location range.
* **Outdoor layouts:** experiment I, A(30.2,53.9), B(0,0), C(60.7,0);
  experiment II, A(0,0), B(75.6,0), C(32.2,76.6); experiment III, A(0,0),
  B(128.6,122.8), C(247.1,0). Their receiver points are not published, so
  each uses its triangle's centroid plus (7, -4) m.

Every point is run twice: once with aligned clocks, and once with random
0–99 ns clock edge errors. That is 168 rounds, about 70 s of simulation.

For every round the testbench checks `t_BA` and `t_CB` within 3 chips. It
then solves for the position, and with aligned clocks the error must be
under 15 m. Results from a typical run:

| Layout | Aligned clocks | Clock edge errors |
|---|---|---|
| Simulation grid, 81 points | 1.0 m mean | 12 m mean |
| Each outdoor layout | 1–2 m | 3–14 m |

The clock-edge figures are the same order as the roughly 10 m reported for
the published simulations and measurements. The photon model here is
simpler than the published channel model, so only the order of magnitude
should be compared.

How far to trust it:

* **Tested.** The RTL is checked cycle by cycle in the unit testbenches,
  and end to end at full size.
* **Not tested.** It has not been run on an FPGA. The optical channel in
  the testbenches is a simple Bernoulli photon model, not a measured PMT
  trace.

## Simulating and changing it

With Verilator 5, from the repository root:

    verilator --binary --timing --timescale 1ns/1ps -Wno-fatal -Irtl -y rtl -y tb \
        --top-module tb_uv_tdoa_top rtl/uvpos_pkg.sv tb/tb_uv_tdoa_top.sv -o sim
    ./obj_dir/sim

Any testbench works the same way: name it in `--top-module` and the file
list. `-Wno-fatal` keeps a few warnings from stopping the build:

* `WIDTHCONCAT` comes from the 25,601-bit reset value of the correlator's
  delay line.
* `ZERODLY` comes from the variable delays in the testbench clock and
  stimulus code.

Run times:

* **Unit testbenches:** a few seconds each.
* **`tb_uv_tdoa_top`:** about 15 s. Almost all of it is the 25,601-chip
  delay line, which changes on every 10 ns step.
* **`tb_uv_tdoa_workloads`:** about 70 s.

Sizes are parameters with the published values as defaults:

* `L`, the pilot length, up to 256 (the length of the pilot function). Set
  it on `rx_sync`, `rx_correlator` and `uv_rx`.
* `N`, the chips per symbol.
* `SLOT_CHIPS`, the slot length in chips.
* `SEARCH_WIN` and `BLANK_LEN`, the peak search window and the blanking
  length.
* `ROUND_GAP`, the gap that opens a new round.
* `CLKS_PER_BIT`, the serial bit time.
* `ADC_W`, the ADC width.
* The transmitter's `SLOT_TICKS` and `TICKS_PER_SYMBOL`.

`tb_rx_sync` and `tb_uv_rx` show consistent reduced sizes. When changing
`L`, `N` or the clocks, keep `T` longer than the pilot plus the largest
delay difference. Keep `corr_thresh` between the sidelobe level and the
expected peak (about `L·n·p/2`).
