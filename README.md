# An audio interface for the Patmos processor (WM8731 codec, DE2-115)

Patmos is a time-predictable RISC processor. This design lets a C program on
Patmos play and record audio through the Wolfson WM8731 codec on the Altera
DE2-115 board. Software sees a few memory-mapped registers on the Patmos OCP
I/O bus: the output sample pair, the input sample pair, some enable, request
and status bits, and a port for writing the codec's configuration registers.
The hardware turns those registers into the codec's two serial protocols:
DSP-mode-A frames for the audio data and I2C for configuration.

There is no audio buffer, on purpose. Each sample is read, processed and
written by the processor within one sample period, so the delay from input to
output is a single sample (19.2 µs). Software keeps pace with the codec by
polling a frame-sync (LRC) bit. The hardware only makes sure that a sample
pair is never changed halfway through a frame.

The structure, the protocols, the clock arithmetic and the I2C state machine
follow the design described by D. Sanz Ausín and F. Goerge, "Design of an
Audio Interface for Patmos" (DTU course 02211, 2016). That design was written
in Chisel. This is a new SystemVerilog implementation of it. Where the
description stops (the register map, the request/busy handshake, bit-level
I2C timing, reset), the choices are this implementation's own. They are listed
in [Departures and own choices](#departures-and-own-choices).

## Block structure

```
             OCP (cmd/addr/data, resp/data)
  Patmos  <------------------------------>  audio_interface  (registers)
                                             |   |   |    |
        AuLin/AuRin, En, Req  ---------------+   |   |    +--- En --> audio_clk_gen --> XCLK, BCLK
        Busy, LRCLK  <--------- audio_dac <------+   |                    | bclk_rise/bclk_fall strobes
                                  |  DACDAT, DACLRC  |                    v
        AuLo/AuRo, Busy, LRCLK <- audio_adc <--------+            (to audio_dac, audio_adc)
                                  |  ADCDAT in, ADCLRC out
        data, addr, req / ack <-> audio_i2c --Din/WE/Cin--> i2c_out --> SCLK, SDIN (inout)
                                         <----Dout----
```

`audio_top` holds all six blocks. Its ports are the OCP port and the codec
pins. Every block runs on the single processor clock (80 MHz on the board).
BCLK is a divided copy of that clock, not a clock of its own.

| module | role |
|---|---|
| `audio_pkg` | OCP types, register offsets, codec constants, state enums |
| `audio_clk_gen` | divides the clock by 6 into XCLK = BCLK = 13.33 MHz; emits edge strobes |
| `audio_dac` | sample-rate counter, serialises left then right onto DACDAT |
| `audio_adc` | sample-rate counter, drives ADCLRC, deserialises ADCDAT |
| `audio_i2c` | write-only I2C master for one codec register per request |
| `audio_interface` | OCP slave and the register file |
| `i2c_out` | three-state pad buffer for the I2C data line |
| `audio_top` | wiring, codec pins |

## Clocks and the 52.08 kHz sample rate

The codec runs as a slave, so the FPGA supplies both its master clock XCLK and
the bit clock BCLK. The codec makes its sample rate by dividing its master
clock by 256. For exactly 48 kHz it wants 12.288 MHz, but 80 MHz cannot be
divided by an integer into that. The design divides by 6 instead:

    80 MHz / 6 = 13.33 MHz (XCLK and BCLK)
    13.33 MHz / 256 = 52.08 kHz
    sample period = 256 x 6 = 1536 processor cycles = 19.2 µs

So the sample rate is 52.08 kHz, not a standard rate. The codec's own sample
rate setting (its sampling-control register, written over I2C) must select
the divide-by-256 mode that would give 48 kHz from 12.288 MHz.

`audio_clk_gen` has one counter and one toggle flip-flop. BCLK is high for 3
cycles and low for 3. XCLK is the same signal. The ADC and DAC do not clock on
BCLK. Instead the generator gives them two one-cycle strobes, `bclk_rise` and
`bclk_fall`. Each is high in the cycle *before* BCLK changes. A flip-flop that
updates on a strobe therefore changes at the same clock edge as BCLK does. This
is how the DAC makes its data change exactly on the falling BCLK edge.

Each converter has its own sample counter of FS_DIV x CLK_DIV processor
cycles. When the counter ends, the converter waits for the next falling BCLK
edge and then starts a frame. 1536 is a multiple of 6, so every frame starts
at the same BCLK phase. LRC pulses are exactly 1536 cycles apart.

## The audio frame (DSP mode A)

Both directions use the codec's DSP mode A. In bit-clock periods:

```
BCLK    _|‾|_|‾|_|‾|_|‾|_ ... _|‾|_|‾|_|‾|_ ... _|‾|_|‾|_ ...
LRC     _/‾‾‾\___________ ... _____________ ... __________   (one BCLK high)
DAT     _____X L15X L14X  ... X L0 X R15X   ... X R0 X____
             ^ bit 1: MSB of left      ^ right follows with no gap
```

* The FPGA raises LRC on a falling BCLK edge and lowers it on the next one.
  The codec sees LRC high at the rising edge in between.
* DAC: DACDAT changes on the falling edges that follow. The codec reads it on
  the rising edges. Left is sent MSB first, then right, with no gap.
* ADC: the codec changes ADCDAT on the falling edges. `audio_adc` samples it
  with the `bclk_rise` strobe, just before each rising edge.
* A 16-bit frame takes 1 + 32 BCLK = 198 cycles of the 1536-cycle period. The
  line is then idle until the next LRC pulse.

The DAC's states are numbered 0 to 4: idle, start (wait for a falling edge),
left, right, done. The ADC has four states, in the order of the published
diagram: idle, set LRC high, read left, read right.

## Enable, request and busy

Each converter gets three control signals from the register block. This is
the part to understand before writing a driver.

**DAC.**
* `en` runs the sample counter. While `en` is high a frame goes out every
  sample period, whatever software does.
* `busy` is high from the LRC pulse until the last right bit has been on the
  line for a full BCLK.
* While `req` is high and `busy` is low, the DAC copies the register block's
  AuLin/AuRin into its own sample registers. Each frame sends that copy.
  Software may therefore write the output registers at any time. A write
  during a frame goes out in the next frame and never splits a frame.
* With `req` low, the copy is frozen, and the same pair is sent again every
  frame.

**ADC.**
* `en` runs the sample counter and starts the frames. Leaving it low saves
  power, which is why it exists.
* `busy` is high from the LRC pulse until the last right bit has been sampled.
  Software must not read AuLo/AuRo while it is high.
* At the end of a frame, with `req` high, the received pair goes into the
  output registers. With `req` low they keep the last pair.

**Software loop (copy input to output).** This is the pattern the testbench
uses, written as the C driver would write it:

```
ADC_REQ = 1; ADC_EN = 1; DAC_REQ = 1; DAC_EN = 1;
for (;;) {
    while (!ADC_LRC); while (ADC_LRC);   // sync on the frame pulse
    while (ADC_BUSY);                     // frame received
    DAC_L = ADC_L; DAC_R = ADC_R;         // process here
}
```

The LRC status bits are live copies of the pins, high for 6 cycles. A polling
loop must read one at least every 5 cycles to be sure of catching the pulse.
The OCP response takes 1 cycle, so a tight loop in the testbench manages this.
On real Patmos code, polling the busy bits is the safer way to sync.

## Codec configuration over I2C

The WM8731 control port can only be written. A write is three bytes, and the
codec acknowledges each one:

    START  0011010 0  A  addr[6:0] data[8]  A  data[7:0]  A  STOP

`audio_i2c` sends one such write per request. It follows the published state
machine, with states numbered 0 to 9:

    0 idle / start cond -> 1 send slave adr -> 2 wait for ack
      -> 3 send data 1st 8 bit -> 4 wait for ack -> 5 send data 2nd 8 bit
      -> 6 wait for ack -> 7 finish_1 -> 8 stop cond -> 9 finish_patmos

A missing acknowledge in any of the three waits sends the machine back to idle.

Bit timing:
* SCLK runs at 200 kHz, which is 400 processor cycles per period. The codec's
  limit is 526 kHz.
* The half-period counter (HALF_PERIOD = 200) runs all the time.
* SDA changes only in the middle of the SCLK low phase. The exceptions are the
  start condition (SDA falls while SCLK is high) and the stop condition (SDA
  rises while SCLK is high). An assertion checks this rule.
* For each acknowledge bit the master lowers `we` and releases SDA. It samples
  the line on the rising SCLK edge.

A write takes 27 SCLK periods plus the start and the stop, about 11,600
cycles (0.15 ms).

Handshake with software:
1. Write the register address and data.
2. Set I2C_REQ.
3. Poll I2C_ACK until it reads 1. It rises once the stop has been sent.
4. Clear I2C_REQ. I2C_ACK then falls.

If the codec does not answer, idle first puts a stop condition on the bus.
If the request is still set, it then retries the whole write.

The data line is bidirectional. `audio_i2c` itself has only plain ports: it
gives a data bit `sdin_o` and a write enable `we`, and reads the line back
on `sdin_i`. The separate `i2c_out` buffer turns these into the pin. It drives
`i2c_sdin` when `we` is 1 and floats it otherwise. The board must pull
`i2c_sdin` up, because a released line reads as 1 through that pull-up, and
as 0 when the codec pulls it down for an acknowledge. The original design
split the buffer out like this because Chisel has no bidirectional ports.

## Register map and OCP timing

Byte offsets inside the device. Only address bits [5:2] are decoded.

| offset | name | access | bits |
|---|---|---|---|
| 0x00 | DAC_L (AuLin) | RW | [AUDIO_BITS-1:0] |
| 0x04 | DAC_R (AuRin) | RW | [AUDIO_BITS-1:0] |
| 0x08 | DAC_EN | RW | [0] |
| 0x0C | DAC_REQ | RW | [0] |
| 0x10 | DAC_BUSY | R | [0] |
| 0x14 | DAC_LRC | R | [0] |
| 0x18 | ADC_L (AuLo) | R | [AUDIO_BITS-1:0] |
| 0x1C | ADC_R (AuRo) | R | [AUDIO_BITS-1:0] |
| 0x20 | ADC_EN | RW | [0] |
| 0x24 | ADC_REQ | RW | [0] |
| 0x28 | ADC_BUSY | R | [0] |
| 0x2C | ADC_LRC | R | [0] |
| 0x30 | I2C_DATA | RW | [8:0] |
| 0x34 | I2C_ADDR | RW | [6:0] |
| 0x38 | I2C_ACK | R | [0] |
| 0x3C | I2C_REQ | RW | [0] |

OCP timing:
* Every command (WR = 001, RD = 010) is answered with DVA (01) in the next
  cycle. Read data comes with the DVA.
* Byte enables are ignored.
* Writes to read-only offsets are acknowledged and change nothing.
* Unused bits read as 0. Samples are returned unsigned-extended, so software
  sign-extends them itself.
* XCLK and BCLK run while either converter is enabled.

## Parameters

The defaults are the values of the published design.

| parameter | default | meaning |
|---|---|---|
| `AUDIO_BITS` | 16 | sample width. The codec also supports 20, 24 or 32 bits, set in its format register |
| `CLK_DIV` | 6 | processor cycles per BCLK/XCLK period (even) |
| `FS_DIV` | 256 | BCLK periods per sample. 256 gives 52.08 kHz at 80 MHz |
| `I2C_HALF_PERIOD` | 200 | processor cycles per half SCLK period. 200 gives 200 kHz |

The original design took these values from Patmos's hardware configuration
file. Here they are parameters of `audio_top`. If you change `AUDIO_BITS` or
the sample rate, the codec's format and sampling registers must be set to
match over I2C. An elaboration check requires FS_DIV ≥ 2·AUDIO_BITS + 2, so
that a frame fits in a sample period.

## Departures and own choices

These follow the published design:
* the block split, the signal names between the blocks, and the clock and
  sample-rate arithmetic;
* DSP mode A framing, with DAC data on falling edges and ADC capture on rising
  edges;
* the I2C slave address, the byte layout, the acknowledge after every byte,
  the 200 kHz SCLK, and the I2C states with their numbering;
* the 16-bit default sample width.

These are this implementation's own:
* The register addresses and bit positions. The original register header is
  not published.
* The exact meaning of Req. The text only says data is passed to the codec
  "when the device is not busy".
* The DAC state names, and the end of busy after 33 BCLK.
* The clock generator's duty cycle. BCLK and XCLK come from one divider and
  the clock generator is enabled from the converter enables.
* The I2C bit-level timing, the stop-then-retry after a missing acknowledge,
  and the order of ack and req at the end of a transfer.
* Synchronous active-high reset of every register.
* The design was described as having a "48 kHz" sampling frequency and as
  running at 52.08 kHz. This implementation runs at 52.08 kHz.
* Strobe-based BCLK edges in one clock domain. The original design says only
  which edges the data must change on and be read on.

Not included:
* the processor;
* the codec itself. `tb/wm8731_model.sv` models its digital pins for
  simulation;
* any audio buffer. The delay effect keeps its delay line in processor memory:
  at one second and 52.08 kHz that is about 52,000 stereo pairs (208 kB),
  which is software's job.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_audio_clk_gen` | the 6-cycle period and 3/3 duty cycle, strobe-to-edge timing, XCLK = BCLK, clocks held low while disabled |
| `tb_audio_dac` | every frame delivers the latched pair (the codec model receives it), LRC width 6 and period 1536, busy 198 cycles, pins change only on falling BCLK, write-during-busy, req low |
| `tb_audio_adc` | random pairs from the codec model arrive, MSB/LSB placement, LRC width and period, busy, req-low hold, disable |
| `tb_audio_i2c` | random register writes land in the codec model, the published example (register 1111011, value 110111100), 400-cycle SCLK, three released acknowledge bits, transfer time, abort and retry after a refused address |
| `tb_audio_interface` | every register's write, output and read-back, every read-only input, DVA exactly one cycle after each command, read-only writes ignored |
| `tb_i2c_out` | all combinations of data, enable and external pull-down on a pulled-up line |
| `tb_audio_top` | the whole design at its default parameters, driven as software would drive it |
| `tb_delay_effect` | the echo effect at its full one-second delay, see below |

`tb_audio_top` runs the following, in order:
1. codec set-up over I2C, one write of it refused once and retried;
2. a 24-sample tone on the DAC, synchronised on DAC LRC;
3. 40 frames of input copied to output, checked for order on DACDAT;
4. ADC request low;
5. switch-off.

It counts each of these mechanisms and fails if any never happened. It runs
in well under a second.

`tb_delay_effect` runs an echo effect. The input is mixed with half of the
output from one second earlier:

    out[n] = in[n] + out[n - 52083] / 2

This is the feedback form, so each echo returns at half the level of the one
before. A single echo of the input alone would use the interface in exactly
the same way: one input pair and one output pair per sample.

The delay line is a testbench array, standing in for processor memory. The
run lasts 52,483 frames, about 80 million cycles, which takes under two
minutes in Verilator. Half-way through, a volume write goes over I2C while
the audio loop keeps running. Every output pair is checked against the
formula, computed from the input sequence alone.

`tb/wm8731_model.sv` is a behavioural model of the codec's digital pins:
* an I2C slave at 0011010 that acknowledges and stores register writes, and
  can refuse an address on request;
* a DSP-mode-A receiver for DACDAT;
* a DSP-mode-A sender for ADCDAT.

To run a testbench with Verilator 5, package first:

```
verilator --binary --timing --assert -Irtl rtl/audio_pkg.sv \
  rtl/audio_interface.sv rtl/audio_clk_gen.sv rtl/audio_dac.sv rtl/audio_adc.sv \
  rtl/audio_i2c.sv rtl/i2c_out.sv rtl/audio_top.sv tb/wm8731_model.sv tb/tb_audio_top.sv \
  --top-module tb_audio_top -o sim && ./obj_dir/sim
```

For a block testbench, list the package, that block's files (plus
`audio_clk_gen.sv` for the ADC and DAC), the model and the testbench. All
code is SystemVerilog-2017 and synthesizable, apart from `tb/`.
