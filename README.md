# FPGA logic for a delay-based opto-electronic reservoir computer

A reservoir computer maps an input sequence into the state of a large, fixed,
nonlinear dynamical system and trains only a linear readout of that state. The
delay-based variant needs just **one** physical nonlinear node: the node's
response is fed back to itself through a delay line of length tau, and the
delay is cut into N equal time slots theta = tau/N. Each slot acts as a
"virtual node"; the input is spread across the slots by a fixed random mask,
and neighbouring slots are coupled because the feedback path does not respond
instantly.

Here the nonlinear node is a Mach-Zehnder electro-optic modulator lit by a CW
laser, with a photodetector behind it. Its output power follows
P = sin^2(pi v / (2 V_pi) + phi) of the RF drive v. Everything else in the
loop — the delay, the node-coupling filter, the input injection, the gain and
the operating-point offset — is digital and lives in this logic, between a
16-bit ADC that samples the detector and a 16-bit DAC that drives the
modulator. Sampled at one sample per node slot, the loop realises

    x[k] = beta * sum_{j=0}^{M-1} h[j] * sin^2( x[k-N-j] + gamma' u[k-N-j] + phi )

where h[j] is the M-tap digital filter (M <= N), N the delay in samples and
u the masked input. Because the delay and the filter are digital, they do not
drift, the number of nodes is a register setting (up to 1000), and the filter
coefficients set the network topology.

The RTL in `rtl/` implements that logic. The host PC (masking, training,
readout), the processor and DMA engine that move data between the host and the
logic, the converters and the optics are outside it; `tb/optical_loop_model.sv`
models the converters and optics so the loop can be closed in simulation.

## The loop, block by block

```
 detector ──► ADC ──► adc_spi_ctrl ──► delay_line ──► fir_filter ──┬──► rc_stream_if ──► states to DMA (m_*)
                                                                   │
                      inputs from DMA (s_*) ──► rc_stream_if ──► u │
                                                                   ▼
 modulator ◄── RF DAC ◄── dac_spi_tx ◄──────── gain_offset:  code = clip( G·(s + u) + offset )
     ▲
     └─ (analog sum) ◄── cal DAC ◄── cal_dac_ctrl ◄── rc_regs (REG_CAL)
```

| Module | Role |
|---|---|
| `rc_top` | Wires the chain; one sample per `SAMPLE_DIV` = 100 clock cycles |
| `adc_spi_ctrl` | Sample-rate timer (1 Msps at 100 MHz) and SPI read of the 16-bit ADC |
| `delay_line` | Circular buffer, delay 0..1000 samples (one sample = one node spacing) |
| `fir_filter` | 400-tap FIR with programmable coefficients, 8 multiply-accumulates per cycle |
| `gain_offset` | Adds the input sample to the filter output, multiplies by the gain, adds the offset, clips to the DAC range |
| `dac_spi_tx` | SPI writer; used for the RF DAC (16-bit frames) and inside `cal_dac_ctrl` (24-bit frames) |
| `cal_dac_ctrl` | Holds the calibration-DAC code that corrects the modulator bias drift; resends on every write |
| `rc_stream_if` | Input buffer (one word taken per sample) and state buffer with a frame marker every N states |
| `rc_regs` | Register file: settings, coefficient loading, event counters |
| `sync_fifo` | First-word-fall-through buffer used by `rc_stream_if` |
| `rc_pkg` | Widths, number formats, reset values, register map |

### What is a "state" here

The value streamed back to the host for sample k is the filter output s[k],
the quantity that enters the DAC together with the input. With the stream's
frame length set to N, each DMA packet carries the N virtual-node states of
one input step; the host reshapes them into the N x N_T state matrix and
applies the trained readout weights. Nothing of the readout is in hardware.

### How the delay setting relates to N and tau

The equation's delay N is the whole round trip of the loop, and the loop has
fixed latency besides the programmed delay: the DAC write for sample k starts
about 120 clock cycles after conversion k starts (ADC frame, delay line,
filter, gain stage) and the DAC output changes about 186 cycles after it, when
CS_N rises. The first conversion that sees the new DAC level is therefore
conversion k+2, and the DAC, modulator and detector add their settling time.
The round trip in samples is `delay + L0`, with L0 = 2 plus whatever the
analog path adds. To obtain N
virtual nodes, program `delay = N - L0` after measuring L0 on the real
hardware (for example by looking for the loop's impulse response in the state
stream). The simulation model has no analog delay, so there L0 = 2 exactly, and
`tb_rc_top` checks this.

The filter adds coupling, not delay: tap j mixes the response of node k-j
into node k, which is the sum over j in the equation above. Its length (400)
is at most N for the configurations used (400 and 950 nodes).

### Sample timing

Every stage is started by a one-cycle valid pulse from the previous one, and
each finishes within one 100-cycle sample period, so the chain sustains one
sample per period:

| Stage | Cycles |
|---|---|
| ADC frame (CS fall to result, SCLK = clk/4) | 66 |
| delay line | 1 |
| FIR: ceil(400/8) steps + 1 | 51 |
| gain/offset | 1 |
| RF DAC frame (start to CS rise) | 66 |

An input to the filter while it is still busy, or a DAC write while the
previous frame is still going, is counted as an overrun (REG_OVERRUN) and
flagged by assertions; with the default timing neither can happen. If you
raise the sample rate (smaller `SAMPLE_DIV`), raise `LANES` so that
`ceil(TAPS/LANES) + 2 < SAMPLE_DIV`, and shorten the SPI clock period so both
frames fit.

## Number formats

| Quantity | Format |
|---|---|
| ADC code, delayed sample | 16-bit unsigned |
| filter coefficient h[j] | signed Q1.15 (the factor beta is folded in) |
| filter output s[k] | floor(sum / 2^15), saturated to signed 16-bit |
| input sample (already masked and scaled by the host) | signed 16-bit |
| gain G | signed Q2.14 (range -2 .. +2); reset value 0.58 = 9503 |
| offset | unsigned DAC code added after the gain |
| RF DAC code | 16-bit straight binary, clipped to 0..65535 (REG_SATURATE counts clips) |

The filter accumulator is wide enough (43 bits) never to overflow; only the
final result saturates. The filter output can saturate silently (it is not
counted), so coefficients should be scaled for the expected detector level.

## Host interface

### Register bus

A simple 32-bit bus: `reg_we`, `reg_addr` (4-bit word address), `reg_wdata`;
`reg_rdata` is combinational. A write takes effect at the clock edge where
`reg_we` is high. Bridging this to AXI4-Lite is left to the integration.

| Addr | Name | Access | Meaning |
|---|---|---|---|
| 0 | CTRL | R/W | bit 0 run (starts/stops conversions); writing 1 to bit 1 clears the counters |
| 1 | GAIN | R/W | [15:0] gain, signed Q2.14, reset 0.58 |
| 2 | OFFSET | R/W | [15:0] DAC code, reset 0 |
| 3 | DELAY | R/W | [9:0] delay in samples; values above 1000 are clipped to 1000; reset 400 |
| 4 | CAL | R/W | [15:0] calibration DAC code; each write sends it to the DAC |
| 5 | FRAME | R/W | [15:0] states per DMA frame (0 is taken as 1); reset 400 |
| 6 | COEF_ADDR | R/W | index of the next coefficient |
| 7 | COEF_DATA | W | [15:0] coefficient h[index]; index then advances (wrapping at 400) |
| 8 | SAMPLES | R | samples sent to the RF DAC |
| 9 | UNDERFLOW | R | samples that found the input buffer empty (input taken as 0) |
| 10 | OVERFLOW | R | states dropped because the state buffer was full |
| 11 | SATURATE | R | DAC codes clipped |
| 12 | OVERRUN | R | samples lost to a busy stage |

Coefficients are loaded by writing COEF_ADDR once and then COEF_DATA 400
times. A coefficient write while the loop runs takes effect at once, so the
filter may briefly mix old and new taps.

### Streams

Both streams follow the AXI4-Stream valid/ready rule.

* **Input (`s_tdata`, `s_tvalid`, `s_tready`)**: one signed 16-bit word per
  node slot, i.e. mask value x input x scale, flattened node by node and step
  by step. A 1024-word buffer absorbs DMA bursts. The loop takes one word per
  sample; if the buffer is empty it uses 0 and counts an underflow, so the
  host must keep the buffer from running dry.
* **States (`m_tdata`, `m_tvalid`, `m_tlast`, `m_tready`)**: one signed 16-bit
  state per sample, buffered 1024 deep. `m_tlast` marks every FRAME-th state.
  If the buffer is full the state is dropped and counted; the frame position
  still advances, so `m_tlast` stays on node N-1 of each step.

## Converter interfaces

All three converters use SPI mode 0 style frames, MSB first, SCLK = clk/4
(25 MHz), SCLK idle low:

* **ADC**: CS_N falls (starting the conversion), 16 SCLK pulses, the logic
  samples MISO at each rising edge (the ADC is assumed to present the MSB at
  the CS_N fall and change data after each falling edge), CS_N rises.
* **RF DAC**: CS_N falls with the MSB on MOSI, 16 SCLK pulses, MOSI changes
  after each falling edge, CS_N rises to load the output.
* **Calibration DAC**: the same with a 24-bit frame: command byte 0x01, then
  the 16-bit code. A write during a frame is kept and sent after it, so the
  last value written always reaches the DAC.

These frame formats are generic. Before connecting real parts, compare them
with the data sheets of the chosen ADC and DACs: conversion start, bit
alignment and the calibration DAC's command byte may differ.

## How far this follows the published system

Taken from the published description: the block chain and its order (ADC,
programmable delay, digital filter, addition of the streamed input,
programmable gain, programmable offset, RF DAC); the states taken from the
filter output to the DMA; the calibration DAC fed from the processor; the
1000-sample delay limit with one sample per node spacing; the 400-tap filter;
16-bit converters on SPI; the 1 Msps sample rate; and the operating point
used as reset values (gain 0.58, 400 nodes).

Choices made here, where the description gives no detail: the 100 MHz clock;
the time-multiplexed filter with 8 multipliers; all number formats, rounding
and saturation; the register map and the plain register bus (rather than
AXI4-Lite); the 1024-word stream buffers, zero input on underflow and
dropping on overflow; the frame marker; the run bit; the SPI frame formats;
zero history in the delay line after reset and the bypass at delay 0. The
filter coefficients themselves (the band-pass shape) are not given and are
loaded by the host. How the bias phi is set — through the offset, the
calibration DAC or both — is not stated; both are available here.

Not in the RTL: the processing system, the DMA engine and the Ethernet link
(their ports are the register bus and the two streams of `rc_top`), the host
software (masking, readout training), the converters and the optics.

## Capacity for the benchmark configurations

| Configuration | Needs | Built |
|---|---|---|
| NARMA10, N = 400; 1000/1000 and 25 000-step runs | delay 400, 400 taps | delay up to 1000, 400 taps |
| one-step laser series prediction, N = 400 and N = 950, 4000 points | delay 950, 400 taps <= N | fits |
| spoken digits, N = 400, 77 frequency channels | delay 400 | fits; the mask x cochleagram product is formed by the host |

Sequence length does not matter to the logic: inputs and states stream
through, so a 25 000-step NARMA10 run is 10^7 samples, or 10 s at 1 Msps.

## Simulation

Every module has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=<n> failures=<n>`:

| Testbench | What it checks |
|---|---|
| `tb_adc_spi_ctrl` | words read equal the words an ADC model sent; 100 cycles between samples; no conversions while stopped |
| `tb_delay_line` | out[k] = in[k - delay] for delays 0, 1, 400, 999, 1000 and random, across changes; one-cycle latency |
| `tb_fir_filter` | 400-tap sums against a 64-bit model; 51-cycle latency; overrun; saturation |
| `tb_gain_offset` | 20 000 random and directed cases against the formula, including both clip limits |
| `tb_dac_spi_tx` | frames received by a slave model; 66-cycle frame; start-while-busy dropped |
| `tb_cal_dac_ctrl` | 24-bit frames with command byte; writes during a frame not lost |
| `tb_rc_stream_if` | order, underflow, overflow, frame marker under random back-pressure |
| `tb_rc_regs` | reset values, write/read-back, delay clip, coefficient auto-increment, counters |
| `tb_rc_top` | whole loop at default sizes, closed through the optical model: every DAC word and state against a reference model; sample rate; input underflow, DAC clipping, state overflow, delay and gain change between runs, calibration write, frame markers |
| `tb_rc_workloads` | whole loop in the three benchmark configurations (N = 400 with NARMA10 inputs, N = 950 with a chaotic series, N = 400 with 77-channel spoken-digit-style inputs) |

To run one with Verilator 5 (add `tb/optical_loop_model.sv` for the two
system-level testbenches):

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/rc_pkg.sv rtl/*.sv tb/optical_loop_model.sv tb/tb_rc_top.sv \
    --top-module tb_rc_top -Mdir obj_tb_rc_top
./obj_tb_rc_top/Vtb_rc_top
```

All testbenches use the default sizes; the system-level ones run in seconds.

The optical model (`tb/optical_loop_model.sv`) computes the detector code as
round(60000 * sin^2(pi v/2 + 0.1 pi)), with v the RF DAC code mapped to
-1..+1 (in units of V_pi) plus a small calibration-DAC term. It is only there
to close the loop with a realistic nonlinearity; the testbenches check the
logic against the ADC codes the model actually served, not against the
model's physics.

## Changing the design

* `rc_top` parameters: `SAMPLE_DIV` (clock cycles per sample), `TAPS`,
  `LANES` (filter multipliers), `FIFO_DEPTH` (power of two).
* Delay limit, widths, formats and reset values are in `rc_pkg`.
* For a longer delay, raise `MAX_DELAY` in `rc_pkg` and widen REG_DELAY and
  the `delay` ports (10 bits today).
* For other converters, replace `adc_spi_ctrl` or `dac_spi_tx`; the rest of
  the chain only sees one-cycle valid pulses with 16-bit data.
