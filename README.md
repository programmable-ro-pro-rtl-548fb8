# Programmable Ring Oscillator (PRO) sensor network

A ring oscillator's frequency depends on its supply voltage: when the local
supply sags, every gate slows and the ring slows with it. This design uses
that effect in two ways. First, it spreads a grid of ring oscillators over a
module under protection (for example a cipher core) and counts how fast each
one runs. That gives an on-chip power monitor, and a detector for power and
electromagnetic fault injection that also says *where* on the die the attack
happened. Second, it makes each ring's frequency *programmable*. If one ring
is switched at random between its frequencies and drives an output pad, it
injects wide-band noise into the off-chip power network. That hides the
protected module's power side channel, and a single band-pass filter cannot
remove the noise.

The RTL here covers both uses and everything around them. It has the
programmable ring (as a timing model), the per-ring counters with a safe
clock-domain crossing, a 36-sensor grid, a reference counter, a hardware
window controller, a baseline comparator that raises per-sensor alarms, an
on-chip PRNG for the hiding mode, and a UART command interface.

## 1. The programmable ring

```
 EN ──┐
      AND ──▶ INV ──▶ D0 ──▶ D0 ──▶ D1 ──▶ D1 ──▶ D2 ──▶ D2 ──┬──▶ counter
 ┌───▶┘                                                       │
 └────────────────────────────────────────────────────────────┘
 Dk:  in ──┬── N inverters ──┐
           └─────────────────┴─ MUX(SEL) ──▶ out     N = 4 (D0), 8 (D1), 16 (D2)
```

Each delay cell has a delay path of N inverters and a shorting path, and its
own SEL bit picks one. SEL = 1 takes the delay path and SEL = 0 the shorting
path. N is even, so a cell never inverts. The single inverter after the
enable gate makes the loop inversion odd. The loop therefore holds
1 + 4a + 8b + 16c inverters, with a, b and c each in 0..2. That gives 15
distinct lengths, {1, 5, 9, …, 57}, reached by the 64 SEL codes. Several
codes reach the same length, so a deployment can estimate process variation
by comparing them. The period is `2 · T_prop`, where T_prop is the loop delay.

The ring is a combinational loop that must be placed by hand. It is
therefore written as a **behavioural timing model** (`pro_ring`,
`pro_delay_cell`), not as synthesizable logic. The model uses lumped
inertial delays, derived so that the ring spans the range measured on the
reference FPGA prototype:

| quantity | value | origin |
|---|---|---|
| lowest frequency (57 inverters) | 22.0 MHz | measured on the prototype |
| highest frequency (1 inverter) | 123.44 MHz | measured on the prototype |
| T_INV (per inverter) | 333.5 ps | (22.73 ns − 4.05 ns) / 56 |
| T_MUX (shorting path, per cell) | 550 ps | chosen |
| T_GATE (enable gate) | 417 ps | chosen so that the fastest code gives 123.44 MHz |

`f = 1 / (2 · (T_GATE + n·T_INV + 6·T_MUX))`, where n is the number of
inverters in the loop. The variable `delay_scale` inside `pro_ring`
multiplies every delay and stands for the local supply: 1.0 is nominal, and
1.15 means a 15 % slower (starved) ring. The testbenches use it to model
voltage drops and disturbances. On silicon or an FPGA, replace `pro_ring`
with a hand-placed ring that has the same ports (`en_i`, `sel_i[5:0]`,
`ro_o`).

The enable gate is modelled as an AND of EN and the fed-back output, so a
disabled ring rests with its output at 1. The published description says
only that EN starts and stops the oscillation.

## 2. Counting a ring without trusting its clock

Each PRO has its own counter (`pro_counter`), clocked by the ring output.
The system clock controls the counter and reads its value, and the two
clocks are unrelated. A ring can even run slower than the 24 MHz system
clock: the slowest code gives 22 MHz, and less under voltage starving. The
crossing works like this:

* **Start/stop:** `run_i` passes a two-flop synchroniser in the ring domain.
  The counter therefore starts and stops 2–3 ring periods after the
  reference counter does. The error is a fixed few counts per window,
  against thousands of counts.
* **Clear:** `clr_i` is a registered, glitch-free system-domain signal. It
  resets the counter asynchronously, so a clear also works while the ring
  is stopped.
* **Read:** the count is kept in Gray code and sampled by two system-domain
  flops. `count_o` is therefore always a value the counter really held, even
  while it runs: never a torn mix of old and new bits. It trails the counter
  by two system clocks.

The counter is 32 bits wide, which is this design's choice. At 123.44 MHz
it wraps after about 35 s, far longer than any window. The published
prototype reports 32 registers per PRO. This design uses more flip-flops,
because it adds the Gray synchroniser: 32 ring-domain and 64 system-domain
flip-flops per PRO.

A ring's frequency follows from one measurement window as

```
f_PRO = C_PRO / C_clk · f_clk
```

C_clk comes from `ref_counter`. It counts system clocks over the same
window, shares the clear and run controls, and saturates rather than wraps.

## 3. The sensor grid

`pro_array` places 36 sensors, `ROWS = 9` by `COLS = 4`. Sensor
`k = row·4 + column`, where row 0 is the top row and columns 0–1 form the
left half of the die. Every sensor has its own EN and SEL. All counters
share one clear/run pair, so all 36 counts cover exactly the same window.
Because each sensor index maps to a grid position, an alarm gives a
location. Averaging the alarm or drop ratio per row gives the attacked row,
and comparing columns 0–1 with columns 2–3 gives the attacked half.

## 4. Fault detection: windows, baselines and alarms

During a window, a healthy ring's count grows linearly. Its end value
falls within a narrow band set by jitter, temperature and process. An
attack moves the end value out of that band:

* a **pulse fault** (EM pulse, glitch) adds spurious counts or corrupts the
  counter, so the count lands **above** the band;
* **continuous stress** (voltage starving, a local power virus) slows the
  ring, so the count lands **below** the band.

`monitor_fsm` runs the windows. Its states are IDLE → CLEAR (4 cycles) →
RUN → SETTLE (8 cycles, while the ring-domain counters stop and the
synchronisers drain) → EVAL. There are three kinds of window:

| request | window ends | afterwards |
|---|---|---|
| `start` (host) | on `stop` | counters hold their values for the host to read |
| `char` | after `interval` clocks | counts stored as each sensor's baseline (`capture`) |
| `auto` (level) | after `interval` clocks | counts compared (`eval`); repeats while `auto` is held |

A timed window keeps `run` high for exactly `interval` clock cycles. Every
timed window has the same length, so the comparator can compare raw counts
and needs no division.

`fault_compare` holds a baseline per sensor. Process variation makes every
ring different, so a single range for all sensors would not work. At each
`eval`, sensor k raises `alarm_hi[k]` if its count exceeds
`base[k] + tol`, and `alarm_lo[k]` if it falls below `base[k] − tol`. The
limits are computed one bit wider, so they cannot wrap. Alarms are sticky
until cleared. A sensor that has never been characterised never alarms.
The published design asks for a characterisation step but does not define
one. The baseline-plus-tolerance scheme is this design's own.

## 5. Side-channel hiding mode

Bit 7 of a PRO's configuration byte (`rand_en`) switches that PRO to the
SEL value from `sel_prng`. `sel_prng` is a 32-bit Galois LFSR with
polynomial x³² + x²² + x² + x + 1. It steps every clock and, every
`rand_period` clocks, latches its top six bits as the new SEL. The
default period is 48,000 clocks, which is 2 ms at 24 MHz. That is the rate
used in the reference experiment, where one AES encryption took 41 ms, so
the frequency changed at least 20 times per encryption. The ring output of
one selected PRO leaves the chip on `pro_pad_o` (the `PAD` command picks
which, PRO 0 after reset). The large pad load makes the noise large enough
to matter at board level. A single PRO that does not drive a pad has
little effect.

An LFSR is predictable. A deployment that needs unpredictable noise should
seed it from a true random source; this RTL has none. All PROs in hiding
mode share the same SEL value.

## 6. Host interface (UART)

8N1 at `CLKS_PER_BIT` clocks per bit. The default is 208, which gives
115200 baud from 24 MHz. Commands are a command byte followed by argument
bytes, with multi-byte values sent MSB first. The codes are in `pro_pkg`.

| byte | command | arguments | reply |
|---|---|---|---|
| 01 | CFG | idx, cfg = {rand_en, en, sel[5:0]}; idx FF = all | – |
| 02 | START | – (free-running window) | – |
| 03 | STOP | – | – |
| 04 | READ | idx (FF = reference counter) | 4 bytes |
| 05 | MON | bit 0 auto monitoring, bit 1 one characterisation window | – |
| 06 | INTERVAL | 32-bit window length in clocks (reset 24,000) | – |
| 07 | TOL | 32-bit tolerance in counts (reset 1024) | – |
| 08 | RAND_PER | 32-bit SEL change period (reset 48,000) | – |
| 09 | READ_ALARM | – | ceil(N/8) high-alarm bytes, then as many low-alarm bytes |
| 0A | CLR_ALARM | – | – |
| 0B | PAD | idx of the PRO that drives `pro_pad_o` | – |

The controller skips unknown command bytes. Out-of-range indices change
nothing. A read that arrives while a reply is still being sent is ignored,
so wait for each reply. At reset every PRO is disabled.

A typical fault-monitoring session: `CFG FF 40` (all rings on, fastest
code, since a higher frequency senses voltage more sharply), `TOL`,
`INTERVAL`, `MON 02` (learn baselines), `MON 01` (monitor). Then watch
`alarm_o` or poll `READ_ALARM`.

The alarm vectors also leave the chip as `alarm_hi_o` / `alarm_lo_o` /
`alarm_o`, so a hardware fault response can use them directly.

## 7. Files

| file | contents |
|---|---|
| `rtl/pro_pkg.sv` | widths, configuration struct, command codes |
| `rtl/pro_delay_cell.sv`, `rtl/pro_ring.sv` | behavioural ring model (not synthesizable) |
| `rtl/pro_counter.sv`, `rtl/pro_sensor.sv`, `rtl/pro_array.sv` | counter, one PRO, the grid |
| `rtl/ref_counter.sv`, `rtl/monitor_fsm.sv`, `rtl/fault_compare.sv` | reference, window control, alarms |
| `rtl/sel_prng.sv` | random SEL source |
| `rtl/uart_rx.sv`, `rtl/uart_tx.sv`, `rtl/pro_uart_ctrl.sv` | host link and register file |
| `rtl/pro_top.sv` | the complete network |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_pro_top.sv` | end-to-end test on a 3 × 2 grid with a fast UART |
| `tb/tb_pro_top_full.sv` | one complete operation at the default size (36 PROs, 115200 baud, 1 ms windows) |
| `tb/tb_pro_workloads.sv` | the sensing experiments on the full 9 × 4 grid: fault localisation, EM-fault detection, hiding |

## 8. Simulating

Every testbench prints `TB_RESULT checks=N failures=M`, has a watchdog, and
uses Verilator's timing support (the ring model needs `#` delays):

```
verilator --binary --timing --assert -Irtl -y rtl rtl/pro_pkg.sv tb/tb_pro_top.sv \
          --top-module tb_pro_top -o sim && ./obj_dir/sim
```

Simulation speed depends on the number of running rings: every ring edge is
a scheduled event. The full-size test covers 8 ms of simulated time, with 36
rings running for about 2.6 ms of it. It takes about two minutes of wall
time, and the rings running in its windows cost most of that. The testbenches switch the rings off while they
exchange UART bytes. To model an attack, write
`dut.u_array.g_row[R].g_col[C].u_pro.u_ring.delay_scale`. Values above 1.0
model a supply drop and values below 1.0 a speed-up or disturbance.

`tb_pro_workloads` repeats the experiments the sensor network is meant for, on
all 36 sensors (about one minute):
* A 10 % supply drop with a 1/(1 + d²) profile is centred at two places.
  From the 36 frequency drop ratios, the host must find the right row and
  the right half.
* An EM-style disturbance makes sensors 0–15 run 3 % fast and gives a
  short 4× burst to sensors 23–27 and 31–35. Exactly those sensors must
  raise high alarms.
* One PRO on the pad in hiding mode must show only valid ring frequencies,
  with at least six different ones in 24 change periods.

The end-to-end test exercises, and counts, every mechanism: configuration,
free-running measurement with the f_PRO check, random-SEL hiding with pad
frequency checks, pad selection, characterisation, continuous monitoring
with no false alarm, a supply drop and a speed-up caught on the right
sensors, alarm read-back and alarm clear.

## 9. How far to trust it, and where it departs from the reference design

* **What follows the reference design:** the ring structure and its
  numbers (cell sizes 4/4/8/8/16/16, one leading inverter, SEL polarity,
  15 configurations, 22–123.44 MHz), the per-PRO counter with start/stop
  and reset, the reference counter and the f_PRO formula, the 36-sensor
  9 × 4 grid, the pad-driving hiding mode with a 2 ms change period at
  24 MHz, UART control, and detection by comparing each window's count with
  a characterised normal range, with alarms above and below.
* **What is this design's own:** the ring model's individual delays (only
  the two frequency limits are given), the enable-gate type, the counter
  width and its clock-domain crossing, the window controller and its
  states, the baseline-plus-tolerance comparator, the LFSR, the UART baud
  rate, command set and reset values, and pad selection.
* **Inconsistency in the source:** one power-sensing experiment lists a
  153.2 MHz setting, above the 123.44 MHz maximum stated elsewhere. This
  design follows the 22–123.44 MHz range.
* **Only modelled, not verified:** the ring model reproduces the intended
  frequencies but not real jitter, temperature or process spread, nor
  oscillation glitches when SEL changes mid-cycle. The tolerance needed on
  silicon has to be found by characterisation. The model's delays are
  rounded to the 1 ps simulation precision. The fastest code therefore runs
  at 123.42 MHz instead of 123.44 MHz, an error of about 0.02 %.
* **Not included:** the protected module (an AES core in the reference
  experiments) and its own UART, the power-waster circuits used there to
  emulate attacks, the I/O pad cell, and the host software.
