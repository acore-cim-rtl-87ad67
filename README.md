# A self-calibrating R-2R compute-in-memory core

Analog compute-in-memory (CIM) does a neural network's multiply-accumulate
work inside the memory array. Each weight sets a conductance. The input
voltage times that conductance gives a current, and the currents of a column
add up on one wire. This is fast and frugal. It is also inaccurate: every
column's amplifier and every resistor has its own gain and offset error.

This design is the CIM core of the Acore-CIM system-on-chip described by
Numan, Singh et al. ("Acore-CIM: build accurate and reliable mixed-signal CIM
cores with RISC-V controlled self-calibration"). It rests on two ideas:

* **Weights are digital and the multiplier is linear.** Each weight is six
  magnitude bits plus two sign bits held in ordinary 6T-SRAM cells. These
  bits switch the legs of an R-2R resistor ladder, a multiplying DAC (MDAC).
  The ladder's conductance is exactly proportional to the weight code. This
  avoids multi-level memory devices.
* **The processor calibrates the core.** The RISC-V processor that uses the
  core also measures it. It runs known multiply-accumulates, fits a straight
  line to each column's digital output, and writes trim codes back: a digital
  potentiometer sets the amplifier gain and a 6-bit calibration DAC sets the
  offset. This is called built-in self-calibration (BISC).

This repository gives the core as SystemVerilog. The digital parts are
synthesizable RTL: bus slave, SRAM codec, controllers, trim counters,
multiplexer select and flash-ADC encoder. The analog parts are behavioural
models with the same ports: DACs, sample-and-holds, weight cells, summing
amplifiers, analog multiplexer, and the ADC ladder and comparators. The
models give each column a gain and offset error, so the calibration has
something real to correct. The end-to-end testbench plays the processor and
runs the complete calibration routine.

## Array and number formats

| quantity | value | notes |
|---|---|---|
| array | N = 36 rows x M = 32 columns | `N`, `M` parameters |
| input code | 7 bits: D6 sign, D5..D0 magnitude | one per row |
| weight code | 8 bits: W7 negative, W6 positive, W5..W0 magnitude | one per cell |
| ADC | 6 bits, flash, shared by all 32 columns | |
| zero level V_BIAS | 0.4 V | |
| input references V_INL / V_INH | 0.2 V / 0.6 V | |
| MDAC unit resistor R_U | 385 kOhm (polysilicon) | |
| nominal transresistance R_SA | 10.7 kOhm (about R_U / N) | |
| clock | 32 MHz (ADC rate), S&H period 1 us = 32 clocks | |

**Input DAC** (`input_dac`). The sign bit selects which reference feeds the
ladder. D6 = 1 picks V_INL and gives a positive input; D6 = 0 picks V_INH and
gives a negative input. The output is

    V_DAC = 0.4 V + s * 0.2 V * D/64,   s = +1 if D6 = 1, else -1

so the input swings from 0.2 to 0.6 V around the 0.4 V zero level.

**Weight cell** (`mwc_array`). A cell drives its ladder with V_DAC against
V_BIAS and sources

    I = (V_DAC - V_BIAS) / R_U * W[5:0] / 64

W6 = 1 sends this current to the column's positive line, W7 = 1 to its
negative line, and both 0 leave the cell idle with no leakage path. The two
lines of each column sum the currents of all 36 rows. One cell at full scale
gives about 0.5 uA, and a full column about 18 uA.

**Output stage** (`sa2`). This is the part that needs most care; see the next
section. Ideally it gives

    V_SA = V_CAL + R_SA * (I_pos - I_neg)

A full column thus swings 0.4 V +/- 0.2 V, which is exactly the ADC range.

**ADC** (`adc_mux_sel`, `amux`, `flash_frontend`, `flash_encoder`). The
references V_L and V_H are set by a register and default to 0.2 V and 0.6 V.
The code is (V_SA - V_L) / ((V_H - V_L)/63), rounded and clipped to 0..63.

## The two-stage summing amplifier and its trims

Each column has two inverting amplifiers:

* SA1 turns the positive-line current into a voltage V_X.
* SA2 sums the negative-line current together with V_X, which reaches it
  through a fixed resistor R_SA. Because SA2 inverts V_X, the positive
  current comes out with a positive sign.

Each stage has two trim points:

* **A digital potentiometer** in its feedback path, set by a 6-bit code p.
  The model uses R = 10.7 kOhm * (96 + p) / 128. Code 32 is nominal. The
  range is -25 % to +24 % in steps of 0.78 %.
* **A 6-bit R-2R calibration DAC** on its non-inverting input, set by code c.
  It gives V_CAL = 0.2 V + 0.4 V * c / 64, in 6.25 mV steps. Code 32 gives
  V_BIAS.

The calibration DAC takes its code from a 6-bit **up-counter** (`cal_counter`),
and `bisc_ctrl` moves each counter to the value the processor asks for. An
up-counter can only count upwards. To reach a lower value, `bisc_ctrl` clears
the counter and counts up again from 0. A trim write therefore settles within
64 clocks. STATUS bit 1 (BISC busy) is high until then.

The model gives each stage a gain error a and an offset b. They are fixed per
column by a hash of the column index and `SEED`, up to +/-`GAIN_ERR` (5 %) and
+/-`OFFSET_ERR_UV` (5 mV). With R1 and R2 the potentiometer values and
V1 = V_CAL1 + b1, V2 = V_CAL2 + b2:

    V_X  = V1 - a1 R1 I_pos
    V_SA = V2 - a2 R2 (I_neg + (V_X - V2) / R_SA)

The consequences shape the calibration:

* The negative line's gain is a2 R2 alone.
* The positive line's gain is a1 R1 * a2 R2 / R_SA. It depends on both stages.
* Both lines share one zero-current output. Raising V_CAL2 raises V_SA.
  Raising V_CAL1 *lowers* V_SA by about the same amount, because SA2 inverts.

The calibration therefore works in order. First the negative line is
measured and SA2 is trimmed (gain and offset). Then the positive line is
measured and SA1 is trimmed; the sign of SA1's offset correction is flipped.

## The calibration routine

The processor runs the routine; the testbench `tb_acore_cim_top` contains a
complete version of it. The steps are:

1. **Widen the ADC range** from 0.2/0.6 V to 0.19/0.63 V, i.e. 0.95 x V_L and
   1.05 x V_H. With the default range, a column with a negative offset clips at
   code 0, and clipped points ruin a line fit. The testbench shows clipping at
   the default references and none after widening.
2. **Characterize.** Load every weight of the array with the maximum magnitude
   on one line: 0xBF for the negative line, 0x7F for the positive line. Then
   step all 36 inputs through Z = 8 equally spaced codes. The testbench uses
   0, 7, ..., 49; this stays clear of the rails. One inference measures all
   32 columns at once. For each point the expected code Q_nom follows from the
   equations above.
3. **Fit.** For each column, a least-squares fit of Q_act = g * Q_nom + e
   gives

       g = (Z sum(Qn Qa) - sum Qn sum Qa) / (Z sum Qn^2 - (sum Qn)^2)
       e = (sum Qa - g sum Qn) / Z

4. **Correct.** The new resistance is R' = R / g. In codes that is
   p' = (96 + p) / g - 96. For the offset, e is the offset in LSB along the fit
   line, but a trim moves the output at zero current. The routine therefore
   corrects e + (g - 1) * Q_nom(0) LSB. This equals e when V_CAL equals the low
   ADC reference, which is the case the published derivation assumes. In
   volts the correction is that amount times (V_H - V_L) / 63; divided by
   6.25 mV it gives the change of the calibration code. The routine trims
   SA2 from the negative line first, then measures the positive line again
   and trims SA1.
5. Restore the default references and run.

The ADC here is ideal (its own gain 1, offset 0). A real ADC's gain and
offset, measured separately, would enter as the alpha_D and beta_D factors:
R' = alpha_D R / g and V_CAL' = V_CAL - (e - beta_D) / (alpha_D C_ADC).

Results of the testbench at the default parameters:

* Compute SNR is the variance of the ideal output over the variance of the
  error. Its average over the 32 columns rises from 29.4 dB to 32.3 dB.
* Every characterization point ends within 1.5 LSB of its ideal code.
* In random signed matrix-vector products at the default references, the
  worst error drops from 3 LSB to 1 LSB. The number of outputs off by more
  than 1 LSB drops from 29 to 0.

These figures depend entirely on the error sizes assumed in the model. They
show that the mechanism works; they are not a prediction for silicon.

## One inference, clock by clock

Inputs and weights sit in the SRAM cells (`sram_codec`); the DACs and weight
cells read them all the time. A write of 1 to CTRL starts an inference:

| clock (from the start edge) | event |
|---|---|
| +1 | `sh_sample`: all 36 sample-and-holds capture their DAC voltage; S1 closes |
| +1 .. +32 | settling, one S&H period (SH_CYCLES = 32 = 1 us) |
| +33 | ADC sweep starts; the multiplexer counter is cleared |
| +34 .. +65 | one column per clock goes through the multiplexer to the flash ADC; each code is latched one clock later and stored as Q[c] |
| +68 | busy drops; Q[0..31] can be read |

In total the core is busy for SH_CYCLES + M + 4 = 68 clocks, about 2.1 us.
The published chip runs inferences at 1 MHz by overlapping the ADC sweep of
one inference with the settling of the next. The source does not say how V_SA
is held during that overlap, so this design runs the two phases one after
the other.

## Register map (AXI4-Lite, 32-bit data, 16-bit byte address)

| address | access | contents |
|---|---|---|
| 0x0000 CTRL | W | bit 0: start an inference |
| 0x0004 STATUS | R | bit 0: inference busy; bit 1: BISC counters moving; [31:16]: inferences done |
| 0x0008 ADC_REF | RW | [9:0] V_L in mV (reset 200), [25:16] V_H in mV (reset 600) |
| 0x0100 + 4r | RW | input code of row r, bits [6:0] |
| 0x0200 + 4c | R | ADC result Q of column c, bits [5:0] |
| 0x0300 + 4c | RW | trims of column c: [5:0] pot SA1, [13:8] pot SA2, [21:16] V_CAL code SA1, [29:24] V_CAL code SA2; reset 0x20202020 |
| 0x2000 + 4(rM + c) | RW | weight of cell (r, c), bits [7:0] |

The bus protocol:

* The slave serves one transaction at a time.
* A write needs AW and W valid together. BVALID follows the handshake.
* RVALID comes one clock after the AR handshake.
* Unmapped or unaligned addresses answer DECERR. WSTRB is ignored.
* Writes to read-only registers (STATUS, Q) are ignored and answer OKAY.
* Assertions check that BVALID and RVALID stay up until they are accepted.

Nothing stops the processor from writing weights during an inference; it
should poll STATUS first.

## Running a network on the core

A network larger than the array runs in tiles. The MNIST network
(784-72-10) needs 57,168 weights against 1,152 cells:

* The hidden layer splits into 22 row tiles x 3 column tiles = 66 tiles.
  The last row tile has 28 used rows; its other inputs are 0. The last
  column tile has 8 used columns; its other weights are 0.
* The output layer splits into 2 row tiles.

For each tile, the processor does four things:

1. It writes 1,152 weights and 36 inputs.
2. It runs one inference.
3. It reads 32 codes.
4. It adds Q - 32 to each neuron's running sum.

Between layers it applies bias and activation (ReLU) and scales the sums
back to 6-bit input codes.

`tb/tb_mlp_mnist.sv` runs the whole network this way, all 68 tiles, at
full size. It uses an error-free core and pseudo-random pixels and weights;
no image set is included. It checks every tile's code against the exact
multiply-accumulate, to within 0.6 LSB. It also checks every accumulated
neuron sum, to within 0.6 LSB per tile. Weight loading dominates the run
time: about 3,500 bus clocks per tile, against 68 for the inference itself.

## Files

Synthesizable RTL:

| file | block |
|---|---|
| `rtl/cim_pkg.sv` | constants, register map, AXI4-Lite structs, potentiometer and calibration-DAC laws |
| `rtl/axil_regs.sv` | AXI4-Lite slave and address decode |
| `rtl/sram_codec.sv` | word-line/bit-line decode and the 36 x (1 + 32) SRAM words |
| `rtl/cim_ctrl.sv` | S&H routine: sample, settle, start the ADC sweep |
| `rtl/adc_ctrl.sv` | ADC sweep and Q registers |
| `rtl/adc_mux_sel.sv` | 5-bit column counter, decoder, select gating |
| `rtl/flash_encoder.sv` | bubble correction, thermometer-to-binary encoder, output latch |
| `rtl/bisc_ctrl.sv` | trim registers, up-counter sequencing |
| `rtl/cal_counter.sv` | 6-bit calibration up-counter |
| `rtl/acore_cim_top.sv` | the core; AXI4-Lite slave ports only |

Behavioural models, not synthesizable:

| file | block |
|---|---|
| `rtl/input_dac.sv` | 6+1-bit input DAC |
| `rtl/sample_hold.sv` | input sample-and-hold |
| `rtl/mwc_array.sv` | 36 x 32 MDAC weight cells and column summation |
| `rtl/sa2.sv` | two-stage summing amplifier with potentiometers, calibration DACs and errors |
| `rtl/amux.sv` | 32:1 analog multiplexer |
| `rtl/flash_frontend.sv` | ADC resistor ladder and 63 comparators |

The behavioural models pass voltages as signed integers in microvolts and
currents in picoamperes. Every port is therefore an ordinary two-state
integer, and the models compute in `real` inside. They do not model settling
(the amplifier needs up to 300 ns), noise, wire resistance, or comparator
offsets.

Every block has a self-checking testbench, `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=F`.

## Simulating

With Verilator 5, from the repository root:

    verilator --binary --timing --assert -Wno-fatal rtl/cim_pkg.sv \
      $(ls rtl/*.sv | grep -v cim_pkg) tb/tb_acore_cim_top.sv \
      --top-module tb_acore_cim_top -Mdir obj && ./obj/Vtb_acore_cim_top

The end-to-end test runs at the full 36 x 32 size in well under a minute;
`tb_mlp_mnist` (the tiled network) builds and runs the same way.
Block testbenches build the same way with their own top module. To study
other error sizes, change `SEED`, `GAIN_ERR` or `OFFSET_ERR_UV` on
`acore_cim_top`. `GAIN_ERR` is a fraction; `OFFSET_ERR_UV` is in microvolts
per stage. Keep the gain error within the potentiometer range (-25 %..+24 %)
and keep the test points inside the widened ADC range.

## What follows the published design and what is chosen here

These points come from the published design:

* the 36 x 32 array and the 6+1-bit input and weight formats
* the sign-bit steering of the weight cells and the cell current equation
* the input DAC's transfer function and its 0.2 / 0.4 / 0.6 V levels
* the structure of the two-stage amplifier
* a digital potentiometer for gain and an up-counter-driven 6-bit R-2R DAC
  for offset
* the 32:1 multiplexer with a 5-bit counter, decoder and select gating
* the 6-bit flash ADC with a ladder, bubble correction, encoder and latches
* the 32 MHz ADC rate and 1 us S&H period
* the AXI4-Lite control from a 32-bit RISC-V
* the least-squares calibration with 4-8 points, the widened ADC references
  and separate trims for the two amplifiers

These are this design's own choices:

* the register map and bus response rules
* the potentiometer law and the calibration-DAC span (0.2-0.6 V)
* the clear-then-count rule for lowering a calibration code
* the bubble-correction circuit (3-input majority) and the encoder
* a single clock for everything
* running settling and conversion one after the other rather than overlapped
* reset values, the S1 switch rule (open when idle)
* the error model and its magnitudes
* referring the offset correction to zero current

The weight code W6 = W7 = 1 is not defined by the source and is treated as
idle.

Two things the source mentions are not built. The sample-and-holds take
only the input DAC voltages; the source notes they could also take analog
inputs. The estimate of a 128 x 128 array with high-density resistors is not
built either. `N` and `M` are parameters, but the multiplexer and ADC
sharing for more than 32 columns are not described.

The surrounding chip is not included. The RV32IMFC processor, its
instruction and data memories, the interconnect, UART, GPIO and the JTAG
programming port belong to a separate processor project and are not
described in enough detail to rebuild. The core's AXI4-Lite slave port is
where they connect.

Two points of the calibration are settled here where the source is loose:

* **ADC reference widening.** The source gives the routine as
  0.95 x V_L and 1.05 x V_H, which is 0.19 / 0.63 V. A worked example in the
  same text gives about 0.39 / 0.61 V for a 0.4-0.6 V output range. The
  routine here follows the 0.95 / 1.05 rule, because the test points cover
  both lines, i.e. the whole 0.2-0.6 V range.
* **Repeated measurements.** The source allows measuring each test point
  several times to average out noise. The models here have no noise, so the
  routine measures each point once.
