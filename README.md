# Digital PID current controller with gain scheduling

This is SystemVerilog RTL for the FPGA part of a digital feedback controller
that holds a large DC current to the ppm level. The current (hundreds of
amperes through a pair of Helmholtz coils) comes from a noisy power supply.
It is set by the gate voltage of a bank of power MOSFETs placed in series
with the coils. Two fluxgate transducers with precision sense resistors turn
the current into a voltage: one reading drives the feedback, the other is an
out-of-loop check. A 24-bit delta-sigma ADC digitises each of them at
31.25 kSPS. The FPGA runs a PID law once per feedback sample and writes the
new gate voltage to a 20-bit DAC.

The main difficulty is that the plant is strongly non-linear. A MOSFET's
drain-source conductance rises steeply with gate voltage and then saturates.
So the small-signal gain from gate voltage to current has a sharp peak at
some current, and a single set of PID gains is either too weak below the
peak or unstable on it. The controller solves this with **gain scheduling**.
A PC loads a per-step sequence of gains into a large memory, matched to the
set-point the current will have at that step. The control law is written in
incremental form, so the gains can change from one step to the next without
a jump in the output.

The design follows the controller published by R. Thomas and N. Kjærgaard
(Univ. of Otago), "A digital feedback controller for stabilizing large
electric currents to the ppm level for Feshbach resonance studies". The
published text gives these parts:

- the block structure;
- the control law;
- the word widths;
- the 11-clock processing time;
- the 2.6 µs converter transfer times.

This RTL adds its own choices: the memory organisation, the PC protocol, the
SPI timing details and everything listed under
[Own choices and departures](#own-choices-and-departures).

## Block structure

```
             +---------------------------- FPGA (pid_top) ----------------------------+
 validation  |  adc_spi_driver (m) ----------------------+                            |
 ADC  ---SPI-|                                           v                            |
             |                                  memory_controller <==> external memory|
 feedback    |  adc_spi_driver (y) --+---------------> |    ^  (y, m out; K(t), r_arb in)|
 ADC  ---SPI-|                       |        K(t), r_arb|    |                         |
             |                       v                   v    | words                   |
             |  ramp_generator --> loop_controller <-- cfg     |                         |
             |      r_lin             |   u                    |                        |
             |                        v                   serial_interface <-- UART --> PC
 DAC  <--SPI-|                 dac_spi_driver                 (registers, ramp table)  |
             +--------------------------------------------------------------------------+
```

| Module | Role |
|---|---|
| `adc_spi_driver` (×2) | Reads one 24-bit conversion per data-ready edge. |
| `loop_controller` | Computes the incremental PID law with a selectable set-point and selectable gains. |
| `ramp_generator` | Makes a piece-wise linear set-point from a 16-segment table. |
| `memory_controller` | During a run, supplies r_arb(t) and K(t) for each step and stores y and m; also gives the PC access to the memory. |
| `dac_spi_driver` | Writes u to the 20-bit DAC. |
| `serial_interface` | Handles UART commands, the register file and the memory-access path; uses helpers `uart_rx` and `uart_tx`. |
| `pid_pkg` | Holds the widths and types: `gains_t`, `mem_word_t`, `loop_cfg_t`, `ramp_seg_t` and `mem_req_t`. |

These parts sit outside the RTL and are reached through ports of `pid_top`:

- the converters;
- the memory chip and its controller;
- the analog current path;
- the PC.

## One control step

Everything runs off the 50 MHz system clock (20 ns). That frequency follows
from the published processing time of 11 clocks = 0.22 µs. A step is
triggered by the feedback ADC's data-ready edge, once every
T_s = 32 µs = 1600 clocks:

| Stage | Clocks | Time |
|---|---|---|
| data-ready synchroniser and edge detect | 3 | 0.06 µs |
| ADC read: 5 setup + 24 bits × 5 + 5 hold | 130 | 2.6 µs |
| control law (`loop_controller`) | 11 | 0.22 µs |
| hand-over to the DAC driver | 1 | 0.02 µs |
| DAC write: 5 setup + 24 bits × 5 + 5 hold | 130 | 2.6 µs |
| **data-ready to DAC update** | **275** | **5.5 µs** |

The DAC's own settling (about 1 µs) comes on top, for roughly 6.5 µs. The
ADC's low-latency filter adds one full sample period of measurement delay.
That delay, and not the FPGA, is what limits the usable loop bandwidth to a
few kHz. The end-to-end testbench checks the 275-clock figure on every
sample.

## The control law in fixed point

For each sample, `loop_controller` computes

```
e_n = r_n - y_n
u_n = u_{n-1} + 2^-N * A * [ Kp (e_n - e_{n-1}) + Ki/2 (e_n + e_{n-1}) + Kd (e_n - 2 e_{n-1} + e_{n-2}) ]
```

This is a discretised PID law in velocity form (trapezoidal integral).
Discrete and continuous gains relate as Kp = K_p, Ki = K_i T_s and
Kd = K_d / T_s. The bracketed correction is added to the previous output
instead of recomputing the output. Two things follow from that:

- No integral sum is kept, so nothing winds up.
- Changing the gains changes only the size of the next correction, so
  gain scheduling causes no output step.

**Number formats.**

| Quantity | Format |
|---|---|
| y, r | 24-bit two's-complement ADC codes |
| e | 25 bits |
| Kp, Ki, Kd | 16-bit unsigned integers |
| A | 16-bit unsigned integer |
| N | 6-bit shift, 0…62 |
| u | 20-bit two's-complement DAC code |

**Order of operations.** Each of the 11 states does one arithmetic step:

1. Capture the inputs.
2. Form e.
3. Form the three differences.
4. Form the three products in turn.
5. Form the sum S = 2·Kp·d1 + Ki·s + 2·Kd·d2, at 47 bits.
6. Multiply by A, at 64 bits.
7. Shift right arithmetically by N+1.
8. Add to u.
9. Saturate.

Ki/2 is folded into the final shift (the "+1"), so no bit is lost before
the one final truncation. The sum is clamped to the DAC range and the
clamped value is what the next step builds on.

**Effective gains and resolution.** The gain seen by the loop is A·K/2^N DAC
codes per ADC code. A converts between the two converters' step sizes:

- One ADC code is 2.5 V / 2^23 ≈ 0.30 µV. With a 10 Ω sense resistor and a
  1:1500 transducer that is 45 µA of coil current.
- One DAC code is 20 V / 2^20 ≈ 19 µV.

The shift rounds toward minus infinity, so a correction smaller than one
DAC code is dropped. The loop therefore settles within a band of about
2^(N+1) / (2·Ki·A) ADC codes. Choose N and A large enough that this band
is below the noise (for example, raise A and N together). The testbench
uses A = 1 and N = 16, which gives an 80-code band. It checks settling
against that band.

**Modes.** `cfg` selects:

- the set-point: `r_lin` from the ramp generator, or `r_arb` from memory;
- the gains: fixed registers, or `K(t)` from memory;
- open-loop drive: with `loop_en` = 0, every sample writes `u_manual` to
  the DAC. A DC operating point for measuring the plant's transfer function
  can be set this way. A sinusoidal gate drive at kHz frequencies cannot be
  sent through this register: one register write over the link takes 60 µs,
  which is longer than a sample. How the published measurements generated
  that drive is not described, and no separate waveform source is built
  here.

On the first closed-loop sample the error history is filled with the
current error. The loop thus starts from `u_manual` without a proportional
or derivative kick.

## Runs, memory record and gain scheduling

The external memory is organised as 2^22 words of 128 bits. That fills a
512 Mbit LPDDR device and gives 4.19 million steps, or 134 s at 32 µs per
step. There is one word per control step:

| bits | field | written by |
|---|---|---|
| 127:120 | spare | PC |
| 119:104 | Kp(t) | PC |
| 103:88 | Ki(t) | PC |
| 87:72 | Kd(t) | PC |
| 71:48 | r_arb(t) | PC |
| 47:24 | y (feedback measurement) | controller |
| 23:0 | m (validation measurement) | controller |

A run works as follows:

1. The PC writes NSTEPS and sets CMD bit 0.
2. `memory_controller` fetches word 0. When it arrives, `running` rises.
3. At each feedback sample the loop controller takes r_arb and K from the
   current word (if selected) in the same clock as the sample. At the same
   time the memory controller queues two accesses: a byte-masked write of
   y and m into that step's word (bytes 0–5 only, so the programmed bytes
   are kept), and the prefetch of the next word.
4. After NSTEPS samples the run ends. The set-point and gains then hold
   the last word, and the ramp generator holds its last value.

A finished run thus leaves the measured record next to the control sequence
that produced it. The PC reads it back word by word.

The two loop accesses take a few tens of clocks out of the 1600-clock
period. PC accesses go only when no loop access is pending (`host_stall`
marks the wait). If a sample arrives before the previous step's accesses are
done, the sticky `overrun` status bit is set.

The external memory is reached through a simple port. `mem_req` and
`mem_rq` stay stable until `mem_gnt` (an assertion checks this). A read's
data returns later with `mem_rvalid`, and one access is in flight at a time.
On hardware a vendor LPDDR controller would sit behind this port. Only a
behavioural model of it, `tb/lpddr_model.sv`, is provided.

## Linear ramps

`ramp_generator` holds 16 segments. Each segment has:

- a signed 32-bit slope, in ADC codes per step with 16 fraction bits;
- a 32-bit length in steps.

At the start of a run the set-point is loaded from R_START. During the run
each sample adds the current slope. A segment of length 0, or the end of
the table, stops the ramp at its last value. A hold is a segment with slope
0. The output is clamped to the ADC range.

Example: a rise from 0 to 1 V in 100 ms is 3125 steps. That is 3.36 million
codes, or 1073.7 codes per step, so the slope is 70,368,744 (1073.7 × 2^16).
Shaped trajectories such as minimum-jerk ramps are not linear. Load them as
an r_arb sequence instead.

## PC protocol

The link is a UART at 8N1 and 1 Mbaud (50 clocks per bit; set with
`CLKS_PER_BIT`). Multi-byte fields go most significant byte first. The host
waits for each reply before sending the next command.

| Command | Bytes | Reply |
|---|---|---|
| register write | `57` addr data[31:0] | `06` |
| register read | `52` addr | data[31:0] |
| memory write | `4D` addr[23:0] word[127:0] | `06` |
| memory read | `6D` addr[23:0] | word[127:0] |
| anything else | — | `15` |

| Addr | Register |
|---|---|
| 00 | CTRL: [0] loop on, [1] set-point from memory, [2] gains from memory |
| 01 | CMD: write [0]=1 to start a run, [1]=1 to abort |
| 02 | STATUS: [0] running, [1] overrun, [2] u saturated, [3] DAC initialised |
| 03–05 | Kp, Ki, Kd (fixed gains) |
| 06 | A |
| 07 | N |
| 08 | U_MANUAL (signed DAC code) |
| 09 | NSTEPS |
| 0A | R_START (signed ADC code) |
| 0B | STEP (read only) |
| 0C–10 | last y, m, u, e, r (read only, sign-extended) |
| 20+2i, 21+2i | ramp segment i: slope, then length. Writing the length stores the segment. |

## Converter interfaces

- **ADC** (`adc_spi_driver`, ADS127L01-style):
  - `drdy_n` falling starts a read.
  - SCLK idles low. The ADC shifts on the rising edge and the FPGA samples
    on the falling edge, MSB first.
  - SCLK runs at 10 MHz: 2 clocks high, 3 low.
- **DAC** (`dac_spi_driver`, AD5791-style):
  - Frames are 24 bits: {R/W=0, address, 20 data bits}. SCLK idles high
    and the DAC latches on the falling edge.
  - After reset the driver first writes control word 0x200002: output
    buffer on, ground clamp and tristate released, two's-complement
    coding.
  - A value that arrives during a frame is sent next; the latest value
    wins.
  - LDAC is assumed tied low, so the output changes when SYNC rises.

## Own choices and departures

These parts are not fixed by the published description and were chosen
here:

- the 128-bit word layout and the prefetch/write-back scheme;
- logging only during a host-started run;
- the memory port;
- the UART protocol, baud rate and register map;
- the ramp table format and its size (16 segments);
- the SPI frame timing (picked to give the published 2.6 µs per transfer);
- the SPI modes and the DAC control word (from the converters' data sheets);
- the gains and A being unsigned;
- saturation of u;
- the manual mode and the bumpless start;
- asynchronous active-low reset everywhere.

Not included in the RTL:

- **the LPDDR controller/PHY**, which is vendor IP on the real board;
- **the converters, transducers, MOSFETs, supply and coils**, which are
  analog; the testbenches model them behaviourally;
- **the PC software.**

The validation ADC value stored with a step is the latest validation
conversion at the moment of the feedback sample. The two ADCs are not
assumed to be synchronised.

## Simulation

All testbenches are self-checking and end with a
`TB_RESULT checks=N failures=M` line. Build one with plain Verilator 5, for
example the full system at its default parameters:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/pid_pkg.sv tb/tb_pid_top.sv --top-module tb_pid_top
./obj_dir/Vtb_pid_top +verilator+rand+reset+2
```

| Testbench | What it checks |
|---|---|
| `tb_adc_spi_driver` | Random conversions are read back bit-exact; cs_n is low for 130 clocks; 24 SCLK edges per frame. |
| `tb_dac_spi_driver` | The control word is written first; random codes arrive at the DAC model; a write during a frame is delayed and the latest value wins; each frame is 130 clocks. |
| `tb_loop_controller` | 3000 samples are compared with a 64-bit reference of the law, across random gains, A, N and modes. It checks the 11-clock latency, saturation at both limits and the first-sample rule. |
| `tb_ramp_generator` | Random tables, including a full one and ramps into both limits, are compared step by step with a reference. |
| `tb_memory_controller` | Words are presented in step order; y and m are stored without touching the programmed bytes; host traffic during a run is stalled; overrun and abort work. |
| `tb_serial_interface` | Every command, register, segment write and memory access is exercised through the UART pins. |
| `tb_pid_top` | The full closed loop with a coil-current plant model, configured over the UART (table below). |
| `tb_workload_hold` | Full-length hold cycles at 150 A and 337.5 A, with a plant whose gain peaks (described below). |

`tb_pid_top` takes these steps:

| Step | What happens | What is checked |
|---|---|---|
| manual drive | `u_manual` goes to the DAC | the DAC code |
| run 1 | linear ramp and hold with fixed gains | the whole 250-step record is read back over the UART and matched against the ADC models' conversions |
| run 2 | minimum-jerk set-point and scheduled gains loaded into memory | every DAC code is recomputed from the logged record and the programmed gains |
| run 3 | unreachable set-point | the DAC sits at its upper limit |

It also counts every mode, saturation, host stalls and the latency. It runs
about 5.8 million clocks in a few seconds.

`tb_workload_hold` runs the stability-measurement cycle at full length. Each
cycle is a 100 ms minimum-jerk ramp from zero followed by a 900 ms hold,
which is 31,250 steps with y and m logged at every step. The set-points are
150 A and 337.5 A. That is 3,355,443 and 7,549,747 codes for a
+-2.5 V = +-375 A feedback range. The set-point and gain sequences are
loaded straight into the memory model, because sending 31,250 words over a
1 Mbaud link would take too long to simulate. The registers are still written
over the UART.

The plant reaches a steady current of 9e6 x^2 / (x^2 + 150000^2) codes, where
x = u - 50000. It gets there with a lag of 1/4 per sample. Its small-signal
gain peaks near 2.25e6 codes (about 100 A) and falls on both sides, like the
saturating MOSFET bank.

The gains for each step come from the linearised plant at that step's
set-point. They keep Kp g = 0.4 and Ki g = 0.1, with A = 1, N = 16 and
Kd = 0. Below 2e5 codes the gains stay at their 2e5 values.

Each scheduled cycle must meet four conditions:
- It runs all 31,250 steps without an overrun or a saturated DAC code.
- Every logged y from 250 ms to 950 ms lies within 2^16/Ki + 40 codes of the
  set-point. Outside that band the truncated integral term no longer moves u.
- The validation record follows y.
- The latency is 275 clocks at every sample.

A third cycle ramps to 337.5 A with fixed gains tuned for 337.5 A. It must
show a larger tracking error during the ramp than the scheduled cycle,
because the fixed gains are too high near the gain peak. Typical figures are
a 94,622-code ramp error with scheduling and 1,792,699 codes with fixed
gains. Once the ramp is over, both 337.5 A cycles hold to within 63 codes.

The testbench runs about 155 million clocks, which takes under two minutes.
The 5 s hold used for noise spectra is the same sequence with a longer hold.
It fits in memory (159,375 steps) but is not simulated.

Behavioural models used by the testbenches:

| Model | Stands in for |
|---|---|
| `adc_model` | the ADC's SPI side |
| `dac_model` | the DAC's SPI side, with frame decoding |
| `lpddr_model` | the memory behind its port: sparse, random grant delay, fixed read latency |
