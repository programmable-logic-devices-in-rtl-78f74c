# Low-latency FPGA controllers for a quantum-optics experiment

A digital controller placed inside a fast optical feedback loop is judged by
its latency more than by its throughput: the loop can only be closed up to a
bandwidth of roughly one over the delay from the detector sample to the
actuator command. An FPGA between a fast ADC and a fast DAC keeps that delay to
a handful of 10 ns clock cycles while still allowing non-linear laws (look-up
tables) and precisely shaped linear filters that analog circuits cannot match.

This RTL implements the two controllers of one such experiment, an adaptive
homodyne measurement of the phase of a single light pulse:

* **Cavity lock.** A Fabry-Perot cavity cleans the laser's intensity noise. Its
  Pound-Drever-Hall error signal is filtered by two IIR filters: `T_upper`
  drives a VCO feeding an acousto-optic modulator (fast frequency actuator),
  `T_lower` drives the cavity's piezo (slow length actuator).
* **Adaptive phase integrator.** During each light pulse the local-oscillator
  phase Phi is steered by the homodyne photocurrent I with the gain-scheduled
  law dPhi = I / sqrt(t), t being the time since the pulse began; the
  1/sqrt(t) gain comes from a block-RAM look-up table.

The design follows the description in J. Stockton, M. Armen and H. Mabuchi,
*Programmable Logic Devices in Experimental Quantum Optics* (Caltech), which
gives the adaptive phase datapath down to its bus widths, the IIR filter's
block structure and sample rate, and the board's converter widths, clock and
delay budget. Everything the source leaves open is marked below as a choice of
this implementation.

## Signal flow

```
             +---------------------------- gva_controller_top -------------------------------+
 adc_err ----| io_buffer(2) --+--> iir_filter T_upper --> io_buffer(2) --------------------- |--> dac_aom
             |                |   (cavity_lock)                                               |
             |                +--> iir_filter T_lower --> io_buffer(2) --------------------- |--> dac_pzt
 coef ------>|  coefficient writes, coef_sel = 0 upper / 1 lower                              |
             |                                                                                |
 adc_homodyne| io_buffer(2) --> adaptive_phase ----------> io_buffer(2) --------------------- |--> dac_lo_phase
             |                  phase_sequencer -> ramblock (G = 1/sqrt t) -> multiplier      |
             |                  -> trim -> registered_adder (integrator, reset switch)        |
 adc_aux ----| io_buffer(2) ----------------------------> io_buffer(2) ---------------------- |--> dac_aux
             +--------------------------------------------------------------------------------+
```

All converter words are 12-bit two's-complement codes; the whole design runs on
one 100 MHz clock `clk` with a synchronous, active-high reset `rst`. The ADCs,
DACs and clock generation are outside: ADC codes are input ports, DAC codes
output ports.

## The IIR filter: two bit-serial FIRs and a serial adder

This is the least obvious part of the design, and the one whose timing sets the
servo bandwidth.

A continuous controller G_C(s) of order N is turned (offline, e.g. by a
zero-order-hold or bilinear discretisation) into

    y(n) = sum_{i=0..N} a(i) u(n-i)  -  sum_{i=1..N} b(i) y(n-i)      (b(0) = 1)

and evaluated as two FIR filters and one adder (`iir_filter.sv`):

```
 u_12 --> FIR a --> T --'au'--+
                              (+) --> y (32 bit) --> T --> y_12
 y ----> FIR b --> T --'-by'--+        |
 ^                                     |
 +-------------------------------------+
```

**Bit-serial arithmetic.** The FIR blocks (`fir_serial.sv`) consume their input
one bit per clock, most significant bit first. In each clock the coefficients of
all taps whose current bit is 1 are summed, and that partial sum is folded into
an accumulator by Horner's rule (`acc = 2*acc + partial`, with the sign bit's
partial sum subtracted). A B-bit input therefore needs B clocks, i.e. a FIR
sample rate of f_clk / B. The adder (`serial_adder.sv`) is a single full adder
with a carry flip-flop that forms `au - by` from the least significant bit up,
another B_Y clocks. Because FIR b's input is y itself (B_Y = 32 bits) and the
adder must finish before FIR b can take the next y, one output costs exactly
2 * B_Y = 64 clocks:

```
clock   0 ......................... 31 | 32 ......................... 63 | 64
FIR a   bits 11..0 of u(n) (12 clocks), then idle
FIR b   bits 31..0 of y(n-1)            |                                 |
adder                                   | au - by, bits 0..31             |
y, y_12                                                                   | y(n) valid (y_valid),
                                                                          | u(n+1) sampled (sample)
```

So each filter updates at 100 MHz / 64 = 1.5625 MHz and its output holds between
updates. The input is simply decimated: the value of `u` in the `sample` cycle
is used, the other 63 are ignored. The loop delay of a servo built on it is one
update period plus the I/O buffers.

**Number formats.** `u` and `y_12` are integer converter codes. Coefficients are
signed 32-bit numbers with 24 fraction bits (range about -128 .. +128, step
6e-8). `y` is 32 bits with 20 fraction bits, so `y_12 = y[31:20]`. The three
'T' blocks are arithmetic right shifts that drop least significant bits:

| product                     | fraction bits | shift | result   |
|-----------------------------|---------------|-------|----------|
| a(i) * u                    | 24            | 4     | 'au', 20 |
| b(i) * y                    | 24 + 20       | 24    | 'by', 20 |
| y                           | 20            | 20    | y_12     |

The FIRs themselves are exact (46 and 66 bits wide); only the trims lose
precision. Overflow of the 32-bit y wraps rather than saturates, so the
coefficients must keep |y| below 2048 for any input the loop will see. To load
a filter, scale each coefficient by 2^24 and round:
`coef = '{we:1, set:COEF_A or COEF_B, idx:i, data:round(c * 2**24)}` for one
cycle. `b(i)` uses idx = 1..N. A write takes effect immediately, so the output
computed while coefficients are being changed is meaningless; load them right
after reset or accept one or two bad samples. After reset every filter is a
pass-through (a(0) = 1, all others 0).

**Precision.** Poles close to z = 1, which low corners at this sample rate
produce, leave the low-frequency gain sensitive to the last coefficient bits.
A 3 Hz one-pole low-pass, for example, quantises to a(0) = a(1) = 101 and
b(1) = -(2^24 - 202) in units of 2^-24: its DC gain is the ratio of numbers of
a few hundred LSB and is only accurate to about half a percent, and a corner
ten times lower would be ten times worse. This is the price of the short
update period: the corner frequencies that matter for the lock (100 Hz to
300 kHz) are far less affected (see the fast-arm design in the next section).

## The two servo arms

`cavity_lock.sv` feeds the same error sample to both filters, which start
together after reset and stay in step (`upper_valid` equals `lower_valid`).
The coefficients are not part of the RTL: they come from the measured plant. In
the reference experiment the VCO-AOM acts as a 100 kHz low-pass T_V and the
cavity as a 10 kHz low-pass T_C, and the fast arm is designed as
T_U = T_LP1 T_LP2^2 / (T_C T_V), with T_LP1 a 100 Hz and T_LP2 a 300 kHz
low-pass, so that the loop gain looks like an integrator between 100 Hz and the
unity-gain point. That is a third-order filter, hence the default N = 3. The
slow arm T_L is a low-pass with a corner of a few hertz, dominating below
about 100 Hz. Any other order can be built with the `N` parameter.

`tb/tb_servo_response.sv` carries out this design: each first-order factor
(1 + s/w) is mapped by the bilinear transform at f_s = 1.5625 MHz to
((1 + 2f_s/w) + (1 - 2f_s/w) z^-1) / (1 + z^-1), the factors are multiplied out
and normalised to b(0) = 1, and the result is scaled by 2^24. For T_U this gives
a = (144693, -90545, -142784, 92455) and b = (1, -25075731, 9329764, -1027429),
for a 3 Hz T_L a = (101, 101) and b = (1, -16777014), all in units of 2^-24
(T_U here with unity DC gain; the loop gain is set by scaling a). Fed with a
sine on the error input, the fast arm's measured gain matches the continuous
design within 0.1 % at 200 Hz, 1 kHz and 10 kHz.

### Cancelling a resonance

The same filter can undo a measured plant resonance, which is hard to do with
analog parts whose values are only known to a few percent. In
`tb/tb_aho_compensation.sv` one filter plays a harmonic oscillator (1 kHz,
Q = 10) and a second filter, fed directly with the first one's 12-bit output,
is its inverse (an "anti-harmonic oscillator") times a leaky integrator:
K (s^2 + (w0/Q) s + w0^2) / (w0^2 (1 + s/w_l)(1 + s/w_h)) with corners at
30 Hz and 20 kHz and K = 1 kHz / 30 Hz. Both are second order, so the
coefficients a(3) and b(3) are zero. The pair behaves like an integrator with
unity gain at 1 kHz. Measured gains are 3.318, 1.001 and 0.331 at 300 Hz,
1 kHz and 3 kHz, against 3.333, 1 and 0.333 for an ideal integrator. The
phase is -85, -92 and -99 degrees; the two corners account for the departure
from -90. The resonance, Q and corners are example values.

## Adaptive phase integrator

`adaptive_phase.sv` is a four-stage pipeline around a one-register integrator:

1. `phase_sequencer` keeps the time counter t and a registered table address
   `time_8 = min(t >> 5, 255)`. With the default 6000-clock frame the address
   only reaches 187; the saturation matters for longer pulses.
2. `ramblock` (256 x 16 bits, one block RAM) returns the gain
   `G[a] = floor(65535 / sqrt(a + 1) + 0.5)`, a full-scale 1/sqrt(t) curve
   with a = t/32 (`rtl/gain_lut.hex` holds these 256 words).
3. `pipelined_multiplier` forms I * G (12-bit signed x 16-bit unsigned =
   28 bits); its top 12 bits are the increment dPhi.
4. `registered_adder` adds dPhi to the fed-back 21-bit phase; its top 12 bits
   are registered to the output.

The pulse timing repeats a fixed frame of TAU_EXPERIMENT + TAU_DEAD = 5000 +
1000 clocks: t runs 1 .. 6000 and the pulse is t < 5000 (a 50 us pulse at
100 MHz). The feedback switch in front of the adder is closed while
1 < t < 5000, so each pulse integrates from zero: Phi = dPhi in its first step,
Phi(t) = Phi(t-1) + dPhi(t) after that. While the switch is open the output is
0. A gain-K detector (I = K (phi - Phi)) therefore sees a loop whose gain decays
as 1/sqrt(t), fast acquisition at the start of the pulse and averaging at its
end. From a current sample at the ADC pins to the phase at the DAC pins the
pipeline takes 2 (input buffer) + 2 (table, multiplier) + 1 (integrator) + 1
(output register) + 2 (output buffer) clocks.

The end-of-pulse phase is only a rough estimate of the pulse phase; the
optimal estimate is a function of the whole current and phase record and is
not computed here.

## I/O buffering and latency

Each converter word passes two register stages on the way in and two on the way
out (`io_buffer.sv`), so the identity channel `adc_aux -> dac_aux` has exactly
the 4-clock FPGA delay measured on the reference board (whose ADC adds 10 and
DAC about 1 more clocks, about 160 ns in total, i.e. a control bandwidth limit
near 6 MHz). The split 2 + 2 is a choice; only the total is specified.

## Top-level interface (`gva_controller_top`)

| port           | dir | width     | meaning                                             |
|----------------|-----|-----------|-----------------------------------------------------|
| clk, rst       | in  | 1         | 100 MHz clock, synchronous active-high reset        |
| adc_err        | in  | 12        | PDH error signal                                    |
| adc_homodyne   | in  | 12        | homodyne photocurrent                               |
| adc_aux        | in  | 12        | pass-through channel                                |
| coef           | in  | coef_wr_t | coefficient write: we, set (a/b), idx, 32-bit value |
| coef_sel       | in  | 1         | 0 writes T_upper, 1 writes T_lower                  |
| dac_aom        | out | 12        | T_upper output (VCO-AOM)                            |
| dac_pzt        | out | 12        | T_lower output (piezo)                              |
| dac_lo_phase   | out | 12        | local-oscillator phase                              |
| dac_aux        | out | 12        | adc_aux, 4 clocks later                             |
| lock_update    | out | 1         | one-cycle pulse per servo update (every 64 clocks)  |
| pulse_active   | out | 1         | a light pulse is being measured                     |

`coef_wr_t` and the shared widths are in `rtl/pld_pkg.sv`.

## Where this implementation departs from, or adds to, the source description

* **Integrator loop depth.** The source's text states Phi(t) = Phi(t-1) +
  dPhi(t); its VHDL listing has a clocked adder plus a register in the control
  process, which would put two registers in the loop. The text is followed.
* **Pulse frame.** The text says the process waits for the next pulse; the
  listing counts a fixed frame of tau_experiment + tau_dead. The listing is
  followed; there is no pulse trigger input. The dead time (1000 clocks) is a
  choice.
* **Table address.** The listing feeds the integer time straight to an 8-bit
  address; 5000 clocks do not fit, so t is divided by 32 and saturated. The
  table's scaling (full scale 65535 at t = 0, the +1 that avoids 1/sqrt(0)) is
  a choice.
* **Bit-serial FIR and adder.** Only the rates f_clk/B_U and f_clk/(2 B_Y) are
  specified; the vendor FIR core used originally is replaced by the simplest
  bit-serial structure with that rate.
* **Run-time coefficients.** Originally coefficients are compiled into the
  filters; here they are registers behind a write port, reset to a
  pass-through.
* **Filter order, formats, overflow.** N = 3, Q7.24 coefficients, 20 fraction
  bits in y and wrap-around are choices.
* **One chip, four channels.** The two controllers are described separately;
  placing both on one FPGA with the channel assignment above, plus the identity
  channel, is a choice.
* **Reset.** The original process has no reset. Here all state resets
  synchronously; the pulse counter resets into the dead time so that the first
  pulse starts cleanly.
* **Not implemented:** the converters, the clock oscillator and DLLs, the
  optics, the better phase estimators built on A_v, B_v and C_v, and the
  automatic lock re-acquisition that the source only proposes.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed number of cycles
if it hangs.

| testbench                  | what it checks                                                                 |
|----------------------------|--------------------------------------------------------------------------------|
| tb_ramblock                | every table word against 65535/sqrt(a+1), one-cycle read, run-time writes, EN, RST |
| tb_pipelined_multiplier    | random and corner products, one-cycle latency                                  |
| tb_registered_adder        | random sums with wrap-around, one-cycle latency                                |
| tb_phase_sequencer         | counter, integrate window, address saturation, 6000-clock frame at full size   |
| tb_adaptive_phase          | cycle-exact model of the pipeline with random current; closed-loop phase lock  |
| tb_fir_serial              | random 32-bit coefficients and inputs, 12-clock rate, back-to-back and gaps    |
| tb_serial_adder            | add/subtract, 32-clock latency, result held while busy                         |
| tb_iir_filter              | one-step prediction of the difference equation, 64-clock period, step response, random sets |
| tb_io_buffer               | delays of 2 and 4 clocks                                                       |
| tb_cavity_lock             | both arms against the difference equation, arms in step, per-arm writes        |
| tb_gva_controller_top      | whole chip at full size with plant models: cavity lock and re-lock after detuning steps, phase lock at the end of every pulse, zero output between pulses, 4-clock identity channel |
| tb_aho_compensation        | a 1 kHz resonance followed by its inverse filter; both filters against the difference equation, the pair's gain and phase against an integrator |
| tb_servo_response          | the two servo arms designed from the reference plant; every output of both arms against a double-precision run of the quantised filters, measured T_U sine gains against their exact response |

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`
(the gain table is read as `rtl/gain_lut.hex`):

```
verilator --binary --timing --assert -Irtl -Itb rtl/pld_pkg.sv \
          tb/tb_gva_controller_top.sv --top-module tb_gva_controller_top -o sim
./obj_dir/sim
```

The simulator used has two-state logic; the testbenches reset or initialise
everything they read. Simulated in this way, every testbench passes, and each
one fails when a deliberate fault (an off-by-one in the pulse window, a wrong
trim, a missing carry-in, a swapped select, and so on) is put into its module.
The design was also linted with Verilator `-Wall` and elaborated with the
slang front end of Yosys; neither reports errors, and synthesis finds no
latches. After coarse synthesis the whole chip is about 300 word-level cells
and 860 flip-flop bits, plus the coefficient and table memories.

## Files

`rtl/`: `pld_pkg` (widths, coefficient-write type), `ramblock`,
`pipelined_multiplier`, `registered_adder`, `phase_sequencer`,
`adaptive_phase`, `fir_serial`, `serial_adder`, `iir_filter`, `io_buffer`,
`cavity_lock`, `gva_controller_top`, and `gain_lut.hex` (256 gain words).
`tb/`: one `tb_<module>.sv` per module plus `tb_servo_response.sv` and `tb_aho_compensation.sv`.
