# A fixed-point IIR servo for laser stabilisation

This is the FPGA logic of a two-channel digital feedback controller (a
"servo") of the kind used in atomic and optical physics labs to lock a
laser's intensity or frequency. An error signal comes in through a fast
14-bit ADC. It passes through a chain of fixed-point IIR filters that give
the loop its transfer function (P, PI, PII, PI³, or PII with a lag-lead
notch), and leaves through a fast 14-bit DAC. A soft-core processor talks to
a PC and does two things. It loads the filter coefficients, and it sets the
analog offset and gain stages around the converters through two slow serial
DACs. A different controller is only a different set of coefficients.

The design follows a published description of such a servo, built on Terasic
DE2 (Cyclone II) and DE3 (Stratix III) boards. The filter arithmetic follows
that description closely, down to the bit width of every signal. The
processor interface, the converter pin formats and the slow-DAC protocol are
not described there, so this design chooses its own (see "What is this
design's own choice").

## Signal path and latency

```
 adc_data ─► [reg, offset-binary → 2's complement] ─► section 0 ─► section 1 ─► section 2 ─► [reg, → offset binary] ─► dac_data
               1 clock                                  1 clock      1 clock      1 clock       1 clock
```

Each channel (`servo_channel`) takes N_STAGES + 2 = 5 clocks from ADC pins to
DAC pins, which is 100 ns at the 50 MHz clock of the DE3 version. For the
whole loop, add the converters' own pipeline delays (about 66–108 ns for the
ADC and 26–31 ns for the DAC) and about 30 ns in the analog stages. The loop
bandwidth is then roughly 1/(2 × total delay), which is about 2.5 MHz for
the original 200 ns. The converters dominate that delay. Each filter section
costs one clock because its whole multiply-accumulate is combinational
between two registers.

## The IIR section: where the bits go

`iir_section` is the heart of the design. For a section of order N with
coefficients B0…BN and A1…AN, each a signed fixed-point number with R
fractional bits, it computes in every clock:

```
s    = Σ_{k=0..N} B_k · x[n-k]                 feed-forward sum, input-sized integer × coefficient
acc  = s · 2^R  +  Σ_{k=1..N} A_k · w[n-k]      both terms now carry 2R fractional bits
w[n] = clamp( acc / 2^R )                       DATA_W + R bits: the output plus R extra LSBs
y[n] = w[n] / 2^R                               DATA_W bits, registered
```

Every multiplication or division by 2^R is a shift; the divisions are
arithmetic right shifts, so they round towards minus infinity. In terms of
the usual direct-form-I coefficients, b_k = B_k/2^R and a_k = −A_k/2^R. The
feedback terms are added, not subtracted, so past outputs never need to be
negated.

Three details matter more than they look:

1. **The feedback word keeps R extra LSBs.** The filter state `w` is not the
   14-bit output. It is the output with R more fractional bits (24 bits in
   total for R = 10, 42 bits for R = 28), and the A coefficients multiply
   this wide word. If the state were cut back to 14 bits every sample, the
   filter would re-quantise its own state at the ADC's step size. That would
   throw away the gain in resolution that the many samples within a loop
   time constant (over-sampling) would otherwise give, and the loop noise
   floor would suffer. With the wide state the servo can hold the loop below
   the ADC's own noise floor.

2. **Where the ×2^R and ÷2^R happen.** The feed-forward sum is scaled *up*
   to the feedback's precision before the two are added. One shift then
   brings the sum back to the state format, and a second shift gives the
   output. If either shift were moved earlier, fractional bits would be lost
   before the addition.

3. **Saturation.** The accumulator, after the first shift, is clamped
   (`iir_sat`) to the range of the state word. The feedback therefore cannot
   overflow, and the output sticks at its rail instead of wrapping around.
   This is enough for a section that integrates once. The original authors
   report that a single section set up to integrate twice or more fails to
   hold its output at the rail under a constant input. They trace this to
   the clamp acting like an extra input signal, which a second integration
   turns into a ramp. That failure has not been reproduced with this RTL.
   The remedy they give, one integration per section with sections in
   cascade (`iir_cascade`), is the configuration the testbenches use: three
   cascaded integrators hold the rail.

For the published first-order example (14-bit data, Q5.10 coefficients:
16 bits, 10 of them fractional), the widths come out as follows. The RTL
derives all of them from the parameters:

| signal                      | formula                                   | Q5.10, N=1 | Q3.28, N=3 (default) |
|-----------------------------|-------------------------------------------|-----------:|---------------------:|
| input x                     | DATA_W                                    | 14 | 14 |
| B_k · x                     | DATA_W + COEF_W                           | 30 | 46 |
| feed-forward sum s          | + clog2(N+1)                              | 31 | 48 |
| s · 2^R                     | + R                                       | 41 | 76 |
| A_k · w                     | (DATA_W + R) + COEF_W                     | 40 | 74 |
| accumulator                 | max(s·2^R, Σ A·w) + 1                     | 42 | 77 |
| after ÷2^R                  | − R                                       | 32 | 49 |
| state w (after clamp)       | DATA_W + R                                | 24 | 42 |
| output y                    | DATA_W                                    | 14 | 14 |

### Coefficient format and pole placement

With R fractional bits at clock f_clk, a first-order section can place poles
and zeros on a grid about Δf = f_clk / (2π·2^R) apart. At Q5.10 and 50 MHz
the grid is 7.7 kHz: too coarse for corners of a few kHz, and a PID can even
become unstable once its coefficients are rounded. At Q3.28 the grid is
0.03 Hz. The defaults are therefore Q3.28 (`COEF_W = 32`, `FRAC = 28`: a
sign bit, 3 integer bits, 28 fractional bits), the format of the larger
board. Gains up to just below 8 can be written directly. Set `COEF_W = 16`,
`FRAC = 10`, `ORDER = 1` to get the original small-board section.

High-order transfer functions are sensitive to coefficient rounding. Spread
the poles and zeros over the cascaded sections (for example, one integrator
per section for PI³) rather than packing them into one section. Check the
rounded coefficients numerically before loading them.

## The cascade and the two channels

`iir_cascade` chains N_STAGES = 3 sections, each with its own coefficients,
and passes 14-bit samples between them. Three third-order sections give at
most 9 poles and 9 zeros per channel. The most demanding controller in the
original work needs 4 of each (a PII with a lag-lead notch at 700 kHz). For
a PI³, configure all three sections as integrators. For a plain proportional
gain, set B0 = gain·2^R in one section and B0 = 2^R (unity) in the others.

`fpga_servo_top` holds two such channels, the register bank and two
slow-DAC writers.

## Register port

The processor writes and reads 32-bit words at 8-bit word addresses
(`bus_we`, `bus_addr`, `bus_wdata`, `bus_rdata`). Writes take effect on the
next clock. Reads return the data one clock after the address is applied.

| address                        | access | meaning |
|--------------------------------|--------|---------|
| `0 - c ss iii` (bit 7 = 0)     | R/W    | coefficient: channel c, stage s, index i. i = 0…N selects B0…BN; i = N+1…2N selects A1…AN. Low COEF_W bits, read back sign-extended. |
| `0x80`                         | W      | send the low 24 bits as one frame to the input-side slow DAC |
| `0x81`                         | W      | send the low 24 bits as one frame to the output-side slow DAC |
| `0x82`                         | R      | bit 0 / bit 1: input-side / output-side slow DAC busy |

With the defaults, the coefficient address is `{c[0], s[1:0], i[2:0]}`. All
coefficients reset to zero, so the DACs sit at mid-scale until a filter is
loaded. Coefficients are written one at a time while the filter runs. A
half-written set is live for a few clocks. To avoid a transient in a
running loop, first zero the B coefficients of stage 0, which opens the
loop. Then write the new set, and write stage 0's B coefficients last.

## Slow DACs and the analog stages

In front of the ADC, a variable-offset stage and a variable-gain amplifier
match the input signal to the ADC range. After the DAC, a second pair sets
the output range. Their control voltages come from two slow multichannel
DACs, one on each side. `slow_dac_spi` sends a 24-bit word to one of them,
most significant bit first. `cs_n` goes low for the frame. Each bit appears
on `mosi` as `sclk` rises and is held while `sclk` falls; the DAC samples on
that falling edge. `cs_n` rises CLK_DIV clocks after the last falling edge.
The `sclk` period is 2·CLK_DIV clocks, and a frame takes
24·2·CLK_DIV + CLK_DIV + 1 clocks. The processor composes the word (DAC
channel address and code); a write while the writer is busy is ignored.

Where to put gain matters for noise. The lowest in-loop noise came from
setting the input gain as high as possible, so that the stages after the
ADC matter less. The loop gain is then brought back down, either after the
DAC or in the filter coefficients. Reducing it in the coefficients keeps the
full output range. The price is that small coefficients use fewer of the
fractional bits.

## What is outside this RTL

The clock PLL, the soft-core processor and its serial link to the PC, and
all the analog parts (offset and gain stages, the single-to-differential ADC
driver, the converters and slow DACs themselves) are not logic that can be
given here. The top module brings out the clock, the register port, the
converter pins and the slow-DAC pins in their place.

## What is this design's own choice

- **Register port and address map.** The original processor bus is not
  documented.
- **Converter pin formats.** Offset binary is assumed at both converters.
  The `ADC_OFFSET_BINARY` and `DAC_OFFSET_BINARY` parameters of
  `servo_channel` select two's complement instead.
- **One clock domain.** The converters are assumed to be clocked
  synchronously with the servo logic, so there is no clock-domain crossing
  and every clock is a new sample. The original clocked its converters at
  multiples of a common base clock. On the smaller board, the ADC ran at
  62.5 MHz and the logic at 125 MHz. Running the filter at a multiple of the
  sample rate would need a sample enable on the section registers, and the
  pole positions would scale with the filter clock.
- **Slow-DAC serial protocol and frame length.** The 24-bit frame is that of
  a DAC8734-class part.
- **Reset values.** Reset clears all filter state and coefficients.
- **The `clipped` outputs.** These per-section saturation flags are an
  addition for observation.
- **Rounding.** Divisions by 2^R truncate towards minus infinity (plain
  arithmetic shifts). The original says only that shifts are used. If
  round-to-nearest is preferred, add 2^(R−1) before each shift.
- **Stage count.** The original text gives both two and three cascaded
  sections. Three are built, because a PI³ and the bandwidth measurement
  use three.
- **Multiplier count.** No DSP-block mapping is attempted: the
  multiply-accumulate is plain SystemVerilog. One default section has 4
  multipliers of 14 × 32 bits and 3 of 42 × 32 bits. That is more
  multiplier area than the 18 hardware multipliers reported for the
  original third-order filter.
- **Latency.** The digital path takes 5 clocks from pin to pin (input
  register, 3 sections, output register). The original reports 64 ns for
  the computation on its 50 MHz board, about 3 clocks.

## Files

| file | contents |
|------|----------|
| `rtl/servo_pkg.sv` | default sizes, register addresses, small helper functions |
| `rtl/iir_sat.sv` | clamp of the accumulator to the state range |
| `rtl/iir_section.sv` | one fixed-point IIR section |
| `rtl/iir_cascade.sv` | N_STAGES sections in series |
| `rtl/servo_channel.sv` | ADC capture, cascade, DAC output |
| `rtl/servo_regs.sv` | coefficient register bank and slow-DAC strobes |
| `rtl/slow_dac_spi.sv` | serial writer for one slow DAC |
| `rtl/fpga_servo_top.sv` | two channels, register bank, two slow-DAC writers |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_noise_eater.sv` | closed-loop workloads (PII, PI³, PII with notch) on the full design |

## Verification

Each testbench checks its module against values it computes independently,
and prints `TB_RESULT checks=N failures=M`:

- **`tb_iir_section`** runs the default third-order Q3.28 section and the
  first-order Q5.10 section side by side. It compares both with a 128-bit
  integer reference, clock by clock. The phases are unity gain (including
  the one-clock latency), an integrator driven into both rails, and
  thousands of samples with random coefficients, stable and unstable.
- **`tb_iir_cascade`** checks the 3-clock latency and a reference of three
  chained sections with random coefficients. It also drives three cascaded
  integrators into the clamp.
- **`tb_servo_channel`** checks the 5-clock pin-to-pin latency, the code
  conversions, sign handling and clipping.
- **`tb_servo_regs`** and **`tb_slow_dac_spi`** check every coefficient
  address, the read-back and the status register. For the serial frames
  they check the bits, the edge count and the frame length.
- **`tb_fpga_servo_top`** runs the whole design at its default parameters.
  Channel 0 is locked in a closed loop through a delayed, inverting plant
  model, and must settle and stay locked after two disturbance steps.
  Channel 1 runs three cascaded integrators into the positive rail, must
  hold it, and must then swing to the negative rail. It is then switched
  live to unity gain. One frame is decoded from each slow DAC. The test
  counts each of these events and fails if any of them never happens.

- **`tb_noise_eater`** runs the intensity-stabilisation loop on channel 0
  at the default parameters. The plant inverts the DAC output, delays it
  by 26 clocks (520 ns: the acoustic delay of an acousto-optic modulator
  plus the converter pipelines) and adds a sinusoidal disturbance of
  1000 LSB. Three controllers are loaded in turn, with coefficients computed
  in the testbench by the bilinear transform. For each, the error left at
  the ADC is measured at seven frequencies. It must match the linear
  prediction 1000·|1/(1+L)| within 3 % + 1 LSB, where L is built from the
  rounded coefficients and the 31-clock total loop delay. The measured
  values are below. The error at the loop resonance near 806 kHz is about
  twice the disturbance, and the lag-lead notch cuts it by about 40 %. A
  constant disturbance is fully suppressed, with at most a one-LSB toggle
  when a stage follows the integrators.

  | disturbance | PII 70 k / 7 k | PI³ 100 k / 100 k / 10 k | PII + notch 700 kHz |
  |------------:|---------------:|-------------------------:|--------------------:|
  | 5 kHz       |  88 | 2.2 |  88 |
  | 20 kHz      | 488 |  74 | 494 |
  | 100 kHz     | 714 | 969 | 741 |
  | 806 kHz     | 1989 | 1903 | 1156 |
  | 2 MHz       | 886 | 909 | 813 |

  (Error amplitude in LSB for a 1000 LSB disturbance. Overall gain is 0.5
  in every case. The notch has zero damping 0.1 and pole damping 0.5.)

To run one with Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/servo_pkg.sv tb/tb_fpga_servo_top.sv \
          --top-module tb_fpga_servo_top -o sim
./obj_dir/sim
```

Every testbench finishes in well under a second.
