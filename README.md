# LOCx2 transmitter: SystemVerilog model

LOCx2 is a two-channel serial transmitter for calorimeter trigger readout. Every
25 ns (one 40 MHz LHC clock cycle), each channel takes the samples of eight ADC
signals from two 4-channel ADCs. It wraps them in a 128-bit frame and sends the
frame over one 5.12 Gb/s line. The frame format is the LOCic line code. It costs
only 16 bits per 112 payload bits (14.3 %), and it never reorders the input
data. That keeps the encoder to a few pipeline steps at 320 MHz. Latency is the
main requirement, because the data feed a trigger. In this RTL, an ADC bit
reaches the serial line 10 to 13.2 ns after the ADC delivered it, depending on
the clock phase; the chip's measured latency is below 27.2 ns.

This RTL follows the published description of the LOCx2 ASIC (Xiao et al.,
"LOCx2, a Low-latency, Low-overhead, 2 x 5.12-Gbps Transmitter ASIC for the
ATLAS Liquid Argon Calorimeter Trigger Upgrade"). That description gives:

- the block structure
- the frame composition
- the clock frequencies
- the serializer architecture

It does not give bit-level details: polynomials, word layout, ADC lane format
and the register map. This design chooses them. Each such choice is marked
below and in the comment at the top of the file concerned.

## Structure and clocks

```
  ADC A,B (4 lanes + SCK + FCK each) ──► locic_encoder ──16b@320MHz──► serializer ──5.12Gb/s──► (CML driver)
  ADC C,D ─────────────────────────────► locic_encoder ──────────────► serializer ─────────────► (CML driver)
                        BCR ──► both encoders                ▲ 2.56 GHz        │ 320 MHz back to encoder
  40 MHz refclk ──► lc_pll (x64) ─────────────────────────────┘                 │ 640 MHz test clock (ch 0)
  SCL/SDA/address ──► i2c_slave ──► 32 config bits ──► PLL settings, CML settings
```

| Clock | Source | Used by |
|---|---|---|
| 40 MHz | LHC reference, pin `refclk` | PLL reference, I2C slave |
| 2.56 GHz | `lc_pll`, 64 x reference | last serializer rank (both edges → 5.12 Gb/s) |
| 1.28 GHz, 640 MHz, 320 MHz | divide-by-2 chain in each `serializer` | serializer ranks 3, 2, 1; 320 MHz also clocks that channel's encoder |
| ADC SCK | each ADC, 14 edges per 25 ns | input capture in `adc_lane_store` |

Every clock is locked to the 40 MHz LHC clock, so the design needs no
handshakes between clock domains. Data cross them at fixed phase.

Files (one module or package per file):

| File | Role |
|---|---|
| `rtl/locx2_pkg.sv` | constants, configuration struct `cfg_t`, CRC/PRBS step functions |
| `rtl/locx2_top.sv` | the chip: 2 encoders, 2 serializers, shared PLL and I2C slave |
| `rtl/locic_encoder.sv` | one LOCic encoder |
| `rtl/locic_fifo.sv`, `rtl/adc_lane_store.sv` | ADC capture, "8x4" synchronous FIFO |
| `rtl/prbs_generator.sv` | BCID code of the header |
| `rtl/crc_generator.sv` | CRC-8 trailer |
| `rtl/scrambler.sv` | payload scrambler |
| `rtl/frame_builder.sv` | word sequencing and frame assembly |
| `rtl/serializer.sv`, `rtl/mux2_stage.sv` | 16:1 binary-tree serializer with clock dividers |
| `rtl/i2c_slave.sv` | configuration registers |
| `rtl/lc_pll.sv` | behavioural model of the analog PLL (not synthesizable) |

## The LOCic frame, bit by bit

A frame is 8 words of 16 bits. Each word goes out most significant bit first,
word 0 first:

| Word | Bits 15..8 | Bits 7..0 |
|---|---|---|
| 0 | `1010` + 4-bit BCID code | payload column 0 |
| 1..6 | payload column 2w-1 | payload column 2w |
| 7 | payload column 13 | CRC-8 |

The published format sets these parts:

- an 8-bit header: the fixed `1010` plus 4 bits of BCID coded with two PRBSs
- a 112-bit scrambled payload
- an 8-bit CRC of the payload
- header and trailer are not scrambled

The word layout above is this design's choice.

**Payload order: the data are not reordered.** Each ADC sends 4 lanes with 14
bits per lane per frame, so the two ADCs give 8 lanes x 14 bits = 112 bits. A
payload *column* k is the k-th bit of all eight lanes, in the order ADC A
lanes 3..0, then ADC B lanes 3..0. The columns go out in the order the bits
arrive. The encoder therefore never waits for a whole ADC word before sending.
The receiver puts each channel's bits back together.

Neither the lane format nor the 14-bit figure is published. It is inferred
from 112 bits over 8 signals: one bit per lane per rising SCK edge, FCK rising
on bit 0, calibration bits carried in the lane streams.

**CRC.** CRC-8 with polynomial x^8+x^2+x+1 and initial value 0. It covers the
112 payload bits *before* scrambling, in transmission order. The receiver
descrambles first, then checks it. The polynomial is this design's choice.

**Scrambler.** Self-synchronous, s[n] = d[n] ^ s[n-39] ^ s[n-58], over payload
bits only. Header and CRC bits neither pass through it nor advance it. The
receiver computes d[n] = s[n] ^ s[n-39] ^ s[n-58] from the received bits and is
correct after 58 payload bits, with no reset or alignment step. The polynomial
and the self-synchronous form are this design's choices.

**BCID code.** Two LFSR sequences are restarted by the bunch-crossing reset
(BCR): PRBS-7 (x^7+x^6+1) and PRBS-5 (x^5+x^3+1), both seeded with all ones.
Each advances two bits per frame, and the code is
`{p7[2n], p7[2n+1], p5[2n], p5[2n+1]}` for bunch crossing n.

- PRBS-7 repeats every 127 frames.
- PRBS-5 repeats every 31 frames.
- Together they repeat only after 3937 frames, more than the 3564 bunch
  crossings of an LHC orbit.
- Any 4 consecutive codes (16 bits) identify the bunch crossing uniquely;
  `tb_prbs_generator` checks this.

A receiver finds the BCID by tracking both sequences. The polynomials are this
design's choice.

**Frame boundary.** The receiver finds it from the `1010` pattern every 128
bits, confirmed by the CRC.

## From the ADC clocks into the encoder: the pointer-free FIFO

The published diagram shows an "8x4 synchronous FIFO" between the ADC
receivers and the encoder. Here this is one 8-entry x 4-bit store per ADC
(`adc_lane_store`), written on SCK. It has no read pointer and no flow
control. The rest of this section covers the write side, the read side and the
timing.

**Write side.** The SCK edge that sees FCK rise writes entry 0. Bit k of the
frame goes to entry k mod 8.

**Read side.** FCK of ADC A goes through a two-flop synchronizer in the 320 MHz
domain, and its rising edge becomes `frame_start`. The frame builder builds
word 0 in the `frame_start` cycle and word w in the w-th cycle after it. Its
word index tells `locic_fifo` which columns to return: column 0 for word 0,
columns 2w-1 and 2w for words 1 to 6, column 13 for word 7. These are
combinational reads from the stores.

**Timing.** This works because SCK, FCK and the 320 MHz clock are all locked
to the LHC clock:

- Column k is written at about (k+0.5) x 1.786 ns after FCK.
- Each word is registered 1-2 cycles plus w+1 cycles after FCK.
- Every column is therefore read after it is written and before column k+8
  overwrites it, about 14 ns later.
- The tightest case is column 12 in word 6, with about 2.4 ns to spare.
- ADC B may lag ADC A by a fraction of that; the testbenches use 0.2-0.45 ns.

The synchronizer settles at power-up on one of two cycles, depending on clock
phase. This gives a 3.125 ns step in latency, a source of the latency change
after power cycles that the chip shows.

**Limits.** A depth below 8 does not fit these windows.

## Frame builder and BCR timing

`frame_builder` keeps a word counter 0..7.

- **Alignment.** The first `frame_start` aligns the counter. Until then the
  output word is 0 and `aligned` is low.
- **Re-alignment.** Later `frame_start` pulses are expected exactly when the
  counter wraps. If one arrives out of step, the counter re-aligns and
  `realign` pulses for one cycle.
- **Strobes.** The builder drives three enables on the single 320 MHz clock.
  The PRBS enable fires once per frame, at word 0. The CRC and scrambler
  enables fire on every word. The published diagram draws these as separate
  "PRBS/CRC/SCR clocks".
- **Output.** Each word is built combinationally from the FIFO columns, the
  scrambler and CRC outputs, and the BCID code. It is registered once, so there
  is one 320 MHz cycle from word index to output.

BCR is synchronized like FCK and held until the next word 0. That frame is
bunch crossing 0: the first frame whose FCK the 320 MHz clock samples no
earlier than BCR. With the ADC frame starting after the BCR edge, as in the
testbench, this is the frame that starts after BCR. A system where FCK leads
BCR by less than a 320 MHz cycle must calibrate this offset once.

## Serializer

Following the published serializer:

- three divide-by-2 stages (2.56 GHz → 1.28 GHz → 640 MHz → 320 MHz)
- four ranks of flip-flop 2:1 multiplexers: 8, 4, 2 and 1 of them

In this design's `mux2_stage`, each multiplexer:

1. captures both inputs on the falling edge of its clock
2. outputs the first input while the clock is low
3. outputs the second input while the clock is high

Each rank doubles the rate, and the last rank gives one bit per half period of
2.56 GHz. The next, faster rank samples in the middle of each half period,
where the data are stable.

In a tree like this, serial bit n comes from first-rank input bitrev4(n). The
16-bit word is therefore wired to the tree through that permutation so that
`din[15]` goes out first. From the 320 MHz edge that loads a word to the start
of its first serial bit is 2.93 ns, the same for every word.

The 640 MHz node of channel 0 is the chip's test clock output.

## Configuration (I2C)

The chip has 32 configuration bits. This design stores them as four 8-bit
registers behind a standard I2C register interface. The register layout and the
field widths are this design's; only the list of programmable features is
published.

| Reg | Bits | Field | Reset |
|---|---|---|---|
| 0 | 1:0 | VCO band (four bands) | 2 |
| 0 | 2 | loop filter 3rd order (1) or 2nd order (0) | 1 |
| 0 | 7:3 | spare | 0 |
| 1 | 3:0 | charge-pump current | 8 |
| 1 | 7:4 | loop-filter bandwidth | 8 |
| 2 | 3:0 | CML driver amplitude, channel 0 | 8 |
| 2 | 7:4 | CML driver amplitude, channel 1 | 8 |
| 3 | 7:0 | spare | 0 |

**Address.** The device address is `{1100, addr[2:0]}`.

**Protocol.**

- **Write:** START, address+W, pointer byte, data bytes. The pointer
  auto-increments.
- **Read:** set the pointer with a write, then a repeated START, address+R, and
  data bytes until the master NACKs.

**Sampling.** The slave samples SCL/SDA with the 40 MHz reference. SCL high and
low times must each be at least 3 reference cycles.

**Use of the bits.** The settings go to the PLL model, which ignores them, and
out of the top as `cml_amp`.

## PLL model

`lc_pll` is a behavioural model and is not synthesizable. The real PLL is
analog: phase-frequency detector, charge pump, programmable 2nd/3rd-order loop
filter, LC VCO, divide-by-64.

**Behaviour.** The model measures the reference period on every rising edge.
When the period is steady, it emits 64 output periods per reference period,
phase-aligned to the reference. It requires 64 x f_ref to lie in the simulated
tuning range, 1.86-2.98 GHz. `locked` rises after 16 steady periods. Outside
the range the output stays low.

**Interface.** Its ports carry all the loop settings so the real block can
replace it.

## What is not modelled, and other departures

**Not modelled: analog parts.** These have no logic function:

- The CML line drivers. `ser_out` is their input and `cml_amp` their setting.
- The differential (SLVS/LVDS) input receivers. Inputs are plain logic levels.
- Pads and package.

**The PLL.** It is a behavioural model, not a circuit, and its loop settings
have no effect. The simulated tuning range is used, not the measured 2.0-3.1 GHz.

**This design's choices.** None of these is published:

- the ADC lane format (14 bits per lane per frame)
- the meaning of "8x4"
- the word layout
- the PRBS, CRC and scrambler polynomials
- the BCR-to-frame rule
- the register map
- the I2C address split
- the reset pin

**Reset.** `rst_n` is active-low and asynchronous. It clears every state
register and stops the serializer dividers; the published description does not
mention a reset. The ADC stores are not cleared: they hold data only.

**Clock source for the encoder.** The published encoder diagram labels the
encoder clock as coming from the PLL. The chip diagram draws it from the
serializer. Here it comes from the serializer's divider chain.

## Latency (from simulation)

Measured from the SCK edge that captures an ADC bit to the end of that bit on
`ser_out`:

| Payload bit | Path | Latency |
|---|---|---|
| first (column 0) | synchronizer 1-2 cycles + build 1 cycle + serializer 2.9 ns + 9 bit times | 11.2 ns in the top-level testbench |
| last (column 13) | waits for the CRC word | lower |

The synchronizer delay depends on where FCK falls within the 3.125 ns clock
cycle. That phase is fixed after power-up but unknown, so the first-bit latency
lies between 10.0 and 13.2 ns (phase + 10.04 ns). `tb_locic_encoder` runs the
encoder at four ADC phases, 800 ps apart, and the output is correct at each.

Both are well under the 27.2 ns bound measured on the chip. The pads and the CML
driver add a little in silicon.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_prbs_generator` | BCID code against a bit-serial reference over 1200 frames with BCRs; 16-bit code windows unique in an orbit |
| `tb_crc_generator` | CRC against a bit-serial reference, 300 frames incl. all-0 / all-1 |
| `tb_scrambler` | descrambling with an unsynchronized reference gives back the data |
| `tb_frame_builder` | word index, strobes, word layout, alignment, re-alignment, BCR hold |
| `tb_locic_fifo` | every word of 120 frames against the ADC bits; `frame_start` delay; BCR sync |
| `tb_locic_encoder` | decodes the 16-bit output at four ADC-to-clock phases: sync, CRC, payload, BCID after BCR, 2-3 cycle latency |
| `tb_serializer` | bit order, 16 bits per 320 MHz cycle, constant latency, divided clocks |
| `tb_i2c_slave` | address ACK/NACK, burst write, read-back with repeated START, SDA timing |
| `tb_lc_pll` | lock, 64 periods per reference period, no lock outside the tuning range |
| `tb_locx2_top` | whole chip at its real clocks (details below) |

`tb_locx2_top` runs the whole chip with its default settings and real clock
frequencies:

- four ADC models
- BCR every 3564 cycles
- I2C configuration and read-back
- two bit-level receivers that find the frame boundary and descramble

It then checks every frame: sync, CRC, payload, BCID and latency. It runs
3700 frames on both channels in a few seconds.

`tb/locic_ref_pkg.sv` holds the reference models: bit-serial PRBS, CRC,
descrambler and payload mapping. `tb/adc_emu.sv` is the ADC model.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_locx2_top -y rtl -y tb +libext+.sv \
  rtl/locx2_pkg.sv tb/locic_ref_pkg.sv tb/tb_locx2_top.sv
./obj_dir/Vtb_locx2_top +verilator+rand+reset+2
```

Replace `tb_locx2_top` by any other testbench name.

Two timing notes for writing new testbenches:

- Verilator simulates with two states. A reset line that starts at 0 produces
  no falling edge, so the asynchronous resets never fire. The testbenches
  therefore start `rst_n` at 1 and pull it low after 1 ps.
- The modules that generate clocks with real-valued delays (`lc_pll`, the
  testbench models) declare `timeunit 1ps; timeprecision 1fs;`, because
  2.56 GHz has a half period of 195.3125 ps.

## Changing the design

- Frame geometry (lanes, bits per lane, words per frame) is in `locx2_pkg`.
  `locic_fifo` and `frame_builder` assume 14 bits per lane and 8 words of 16
  bits. Changing the frame size needs both of them to change together, and the
  read windows above to be rechecked.
- The CRC and scrambler polynomials are constants in `locx2_pkg`. The
  reference models in `tb/locic_ref_pkg.sv` must follow them.
- `lc_pll` can be replaced by a netlist or a different model with the same
  ports.
