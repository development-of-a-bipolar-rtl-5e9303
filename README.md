# A 16-channel ±50 V waveform controller for ion shuttling

Moving trapped ions around a segmented trap means driving every DC electrode
with its own time-varying voltage. The faster an ion may be moved without
heating it, the higher its trap frequency must be. That frequency grows with
the square root of the electrode voltages, so an output range of ±50 V instead
of the usual ±10 V gives about √5 ≈ 2.2 times the frequency. The system
documented here has an FPGA (a Zynq-7020) that plays stored voltage waveforms
into eight two-channel 16-bit DACs (AD3542R). Each DAC output is followed by an
amplifier with a gain of 10.2, which gives 16 analog channels of ±50 V.

This RTL is an independent implementation of the programmable-logic part of
that published architecture, "Development of a bipolar 50 V output
digital-to-analog converter system for ion-shuttling operations" (Oshio et al.).
The block structure, the signal names of the sequencer and the layout of its
chunk table follow the publication. The publication does not give the internals
of the blocks, the memory sizes or the DAC link format. Those parts are this
design's own and are marked as such below and in each file header.

## The main idea: waveforms built from repeated chunks

An ion-transport waveform is mostly flat. In the reference experiment an ion is
moved in N = 10 steps (11 voltage sets, positions on a sin² profile). Each set
is held for 100 µs, which is hundreds of DAC updates of the same value. Storing
every sample would waste block RAM. Each lane therefore stores only distinct
samples and describes the waveform as a list of *chunks*:

```
chunk      = chunk_length samples read from wave memory starting at chunk_offset
             played chunk_repetition times back to back
sequence   = chunk table entries 0 .. ctrl_length-1, in order
waveform   = the sequence played `repetition` times
```

A transport step held for 200 updates is one chunk of length 1 with repetition
200. A step-and-return shuttle repeated 10 000 times is a table of 11 or 22
entries with `repetition = 10000`. A table entry is 40 bits, packed MSB first:

| bits  | field              | width                |
|-------|--------------------|----------------------|
| 39:24 | `chunk_repetition` | 16                   |
| 23:12 | `chunk_length`     | WAVE_DEPTH (12)      |
| 11:0  | `chunk_offset`     | WAVE_DEPTH (12)      |

Zero counts play nothing. If `repetition` or `ctrl_length` is zero, a kick does
not start the lane. An entry with zero length or zero repetition is skipped.
The length field is 12 bits wide, so one chunk holds at most 4095 samples.
Offsets wrap around the end of the wave memory.

## Structure

```
          processor write ports                    to the DAC board
               |        |
        +------v--+  +--v------------------+   +-----------------+
lane d: | BRAM    |->| mawg (sequencer)    |-->| dual_spi_master |--> cs_n, sclk, sdio[1:0]
        | 4096x32 |  |  chunk_storage 256  |   +-----------------+    (AD3542R d, ch 2d/2d+1)
        +---------+  +---------^-----------+
                               | tick
   lane 8 (GPIO): BRAM -> mawg -+-> gpio_out (latest sample held)
                               |
                     update timer (every update_period cycles)
```

`dac_system_top` has NUM_DAC + 1 = 9 lanes. Lanes 0–7 each feed one DAC. A
sample holds `{channel 1 code, channel 0 code}`. Lane 8 drives 32
general-purpose outputs, for example to trigger lasers or a camera in step with
the voltages. The GPIO lane is shown in the published block diagram; its width
and its hold behaviour are this design's choice.

| file                       | role |
|----------------------------|------|
| `rtl/dac_pkg.sv`           | sizes and FSM state types |
| `rtl/chunk_storage.sv`     | chunk table: register file, synchronous write, asynchronous read |
| `rtl/wave_pattern_storage.sv` | per-lane block RAM, one-cycle registered read |
| `rtl/mawg.sv`              | waveform sequencer (kick / busy / force_stop, chunk expansion) |
| `rtl/dual_spi_master.sv`   | one DAC update per frame over two data lines |
| `rtl/dac_system_top.sv`    | the lanes, the shared update timer, GPIO, overrun flags |

## The sequencer (mawg)

Interface, as published: `kick`, `busy`, `force_stop`, `repetition`,
`ctrl_length`, `wave_addr`/`wave_data` to the wave memory,
`ctrl_addr`/`ctrl_data`/`ctrl_we` into the chunk table, and
`wave_valid`/`wave_out`. This design adds `tick`, the sample strobe.

The controller has four states:

- **IDLE**: a kick latches `repetition` and `ctrl_length`.
- **CHECK**: looks at the current table entry and steps over empty entries,
  one entry per cycle.
- **RUN**: emits one sample per tick.
- **FINISH**: lets the read pipeline drain.

`wave_addr` is always the address of the next sample, `chunk_offset + pos`.

Timing that a user must respect:

- A tick in cycle T gives `wave_valid` in cycle T+2 inside a chunk. At a chunk
  boundary it is one cycle later, plus one cycle for each empty entry skipped.
  A tick that arrives during CHECK is held for one cycle, so ticks must be at
  least 3 cycles apart. The top enforces this.
- `busy` rises the cycle after the kick. It stays high until the cycle of the
  last `wave_valid`.
- `force_stop` takes effect in the next cycle. The lane goes idle and any sample
  still in flight is dropped. `force_stop` takes priority over `kick`.
- A kick while busy is ignored.
- Write the chunk table and the wave memory only while the lane is idle.
  Nothing stops writes during a run.

## The update timer and lockstep output

A single counter in the top sends `tick` to all nine sequencers every
`update_period` clock cycles. Values below 3 are treated as 3. All lanes that
were kicked in the same cycle therefore update on the same clock edge, and the
16 electrode voltages move together. The publication gives only the maximum
update rate (16 MUPS, a DAC limit). It does not say how the rate is set, so the
timer is this design's choice.

If a lane's sample arrives while its SPI master is still sending the previous
frame, the sample is dropped and that lane's sticky `overrun` bit is set.
`overrun_clr` clears it.

## The DAC link (dual_spi_master)

The publication says only that the controller reaches each DAC over *dual SPI*.
The frame format here is a plain write and is this design's choice:

```
cs_n  ‾‾\__________________ ... ____________/‾‾‾‾
sclk  ____/‾\_/‾\_/‾\_/‾\_ ... _/‾\_/‾\_________     (mode 0, idles low)
sdio1      b39  b37  b35         b3   b1
sdio0      b38  b36  b34         b2   b0
frame = {0 (write), REG_ADDR[6:0], ch0_code[15:0], ch1_code[15:0]}   40 bits
```

- Two bits move per SCLK period. The bits change on the falling edge and the
  DAC samples them on the rising edge.
- When `res12` is set, the upper 12 bits of each code are sent. The frame is
  then 32 bits, which gives the 12-bit mode listed among the output
  resolutions.
- `REG_ADDR` is a parameter (default 7'h2A). The publication gives no DAC
  register map. Set it to the DAC register that takes both channel codes, and
  program the DAC's interface mode to match.

Cost per update: 1 + NCLK·2·SCLK_HALF + CS_GAP clock cycles, with NCLK = 20 for
16-bit frames and 16 for 12-bit frames. At the defaults (SCLK_HALF = 1,
CS_GAP = 2) this is 43 or 35 cycles. From a 100 MHz clock that is 2.3 (16-bit)
or 2.9 (12-bit) million two-channel updates per second per DAC. The DAC itself
can do 16 MUPS. Getting there needs its faster interface modes (double data
rate, streaming without an instruction byte), which this master does not
implement. That is the largest gap between this RTL and the published
performance.

## Analog chain (not in the RTL)

Each DAC output drives a non-inverting ADA4700-1 stage with 47 kΩ feedback and
5.1 kΩ to ground. Its gain is 1 + 47/5.1 = 10.2. The stage runs on ±52 V rails
and has a 2.4 kΩ series resistor at the output. In the reference setup a 2 kHz
first-order low-pass filter sits between the outputs and the trap. The op-amp
limits the slew rate to 20 V/µs.

The testbenches model the DAC as offset binary over −5…+5 V. This span is an
assumption, not a published figure. It gives V_out = 10.2·(code/65536·10 V −
5 V), or about ±51 V at full scale:

```
code = round((V_out / 10.2157 + 5) / 10 * 65536)
```

## Loading and running (processor side)

The processor port is plain signals, so any bus bridge (AXI BRAM controller,
AXI-Lite registers) can sit in front of it:

1. Write samples with `bram_we`, `bram_lane`, `bram_addr` and `bram_data`.
2. Write chunk entries with `chunk_we`, `chunk_lane`, `chunk_addr` and
   `chunk_data`.
3. Set `update_period` (at least 43 cycles, or 35 with `res12`) and `res12`.
4. Set each lane's `repetition` and `ctrl_length`, then pulse `kick` for every
   lane in the same cycle.
5. Poll `busy`, and use `force_stop` to abort.

`rst_n` is synchronous and active low. It resets all controllers, SPI masters,
the timer, GPIO and the flags. It does not clear the memories.

## Verification

Every RTL module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`.

- **`tb_chunk_storage`, `tb_wave_pattern_storage`**: check the memories against
  reference copies, including the field order and the read latency.
- **`tb_mawg`**: expands hand-made and random chunk tables in the testbench and
  compares every sample. It also checks the tick-to-`wave_valid` latency, the
  skipping of empty entries, zero-count kicks, kicks while busy and
  `force_stop`.
- **`tb_dual_spi_master`**: decodes frames from two instances with different
  timing. It checks the bits, the chip-select low time and the update period in
  16-bit and 12-bit modes.
- **`tb_dac_system_top`**: runs the whole design at its default size. The DAC
  links drive `tb/ad3542r_model.sv`, and each DAC output drives
  `tb/output_amp_model.sv`. The test:
  - plays a full transport: 11 steps × 200 updates × 500 ns on all 16 channels,
    which is 100 µs per step;
  - repeats the sequence;
  - plays a compressed pattern with repeated chunks and skipped entries;
  - stops one lane with `force_stop` while the others keep running;
  - forces an overrun;
  - switches to 12-bit frames.

  It checks codes, output voltages, lockstep timing, the update period and the
  GPIO step markers, and fails if any of these mechanisms never happened.

- **`tb_shuttle_workload`**: runs the repeated shuttling workload on all 16
  channels. One sequence is an out-and-back trip of 21 steps, each held for
  100 µs, and the sequence is repeated 50 times. The test checks every DAC
  frame of every channel, then the frame count and the total run time. The
  reference experiment repeated the trip 10 000 times; only the repetition
  count differs, and the 16-bit counter holds 10 000.

To simulate with Verilator, for example the system test:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/dac_pkg.sv tb/tb_dac_system_top.sv --top-module tb_dac_system_top
./obj_dir/Vtb_dac_system_top
```

For a block test, replace the testbench name. List the package first.

## How far to trust it, and what to change

The following follow the publication:

- the lane structure: one block RAM and one sequencer per DAC, plus a GPIO lane;
- the 16 channels on two-channel DACs;
- the sequencer's port names and its kick/busy/force_stop behaviour;
- the chunk/sequence/repetition nesting;
- the 16-bit `chunk_repetition` field and the order of the entry fields;
- the 16/12-bit resolutions;
- the analog gain.

The following are this design's own choices:

- all memory depths (4096 samples, 256 entries per lane);
- the sample pacing by a shared timer, the tick latency and the zero-count
  rules;
- the overrun flag and the GPIO width;
- the whole SPI frame and its timing;
- the plain processor port.

The publication states the DAC count once as "16 DACs". Its channel count, its
block diagram and the two outputs per DAC all point to 8 DACs for 16 channels,
and 8 is what is built.

Common changes:

- Memory sizes: `WAVE_DEPTH` and `CTRL_DEPTH` in `dac_pkg`, or the
  `dac_system_top` parameters.
- Channel count: `NUM_DAC`.
- Link speed: `SCLK_HALF` and `CS_GAP` of `dual_spi_master`. The `update_period`
  limit above scales with them.
