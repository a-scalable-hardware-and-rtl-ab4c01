# Slave-board FPGA for a tree-structured experiment controller

Experiments with hybrid quantum systems, such as trapped ions mixed with an
ultracold atomic gas, need many analog, digital and RF channels. The
sub-systems also run on very different timescales: an ion experiment lasts
tens of milliseconds, while preparing an atomic gas can take tens of seconds.
A controller that only plays a preloaded buffer after a trigger fits this
badly. The controller modelled here is a tree of identical FPGA boards
instead. A master board talks to the computers over a LAN and drives up to six
children over gigabit serial links. Each child is either a slave board or
another master. Every slave board carries its own converters and an FPGA, so
the paths between one board's inputs and outputs run inside the FPGA. Those
paths run at the full 100 MSa/s with a latency of a few clock cycles. The
channels of a board can be reconfigured one at a time while the others keep
running.

This repository gives synthesizable SystemVerilog for the **FPGA of one slave
board**: the routing of samples between converters, on-chip memory and master,
together with the converter drivers, photon counting and the two links to the
master. The master board, the transceiver hard IP, the clocking and all analog
parts are outside this RTL.

## The board around the FPGA

One 100 MHz clock drives everything: the FPGA, every converter and, through a
length-matched tree, every board in the system. A slave board has:

| channel | part | samples | bits | RTL index |
|---|---|---|---|---|
| FADC 1, 2 (fast ADC) | one dual ADC | 100 MSa/s | 16 | inputs 0, 1 |
| PADC 1, 2 (precise ADC) | two serial ADCs | ~100 kSa/s | 18 | inputs 2, 3 |
| DDS 1, 2 (RF synthesiser) | two DDS chips, 16-bit parallel port | 100 MSa/s | 16 | outputs 0, 1 |
| PDAC 1, 2 (precise DAC) | two serial DACs | ~100 kSa/s | 18 | outputs 2, 3 |
| FDAC 1, 2 (fast DAC) | one dual DAC, 8x interpolation | 100 MSa/s in | 16 | outputs 4, 5 |
| digital in | 2 pins, e.g. photon-counter pulses | | | din[1:0] |
| digital out | 6 pins | | | dout[5:0] |

The FPGA is a mid-size Cyclone V with 4.5 Mb of block RAM and six transceivers.

## Data path

```
                    +--> sink memory: record buffers (4) ----+
 FADC1 FADC2        |                                        |
 PADC1 PADC2 -------+--> link controller --> transceiver --> master
 (drivers)          |          |
                    |          +--> "master" stream for each output
                    |
                    v        sink memory: playback buffers (6 + digital)
             +-------------+       |
             | MUX[o]      |<------+      (one per output channel)
             |  4 inputs   |<-------- master stream[o]
             +------+------+
                    v
             transfer function[o]:  off | direct | PID
                    v
             delay[o]  (latency compensation, 0..64 clocks)
                    v
             driver -> DDS1 DDS2 PDAC1 PDAC2 FDAC1 FDAC2

 configuration bus (serial, from the master) -> every MUX address,
   every gain, buffer lengths/rates/loops, stream enables, DDS on/off
 din[1:0] -> photon counters -> counts (configuration bus), time tags (link)
 dout[5:0] <- static register or the digital playback buffer
```

Each output channel thus chooses among three sources: any local input, a
sequence stored on chip, or samples sent by the master. Because each choice
and each gain is a register, a channel can be re-routed or re-tuned while the
others keep playing.

### One sample format

Every internal path carries `stream_t` (from `hq_pkg`): an 18-bit two's-complement
word plus a `valid` strobe. Eighteen bits is the precise converters'
resolution. The fast 16-bit ADC words are left-aligned, so full scale is the
same number on every input. A stream with no new sample keeps `valid` low. A
consumer always holds the last value, so the slow precise channels and the
full-rate fast channels can share every block. For example, a PID stage updates
once per valid sample, so it works at 100 MSa/s or at 100 kSa/s without change.

### Latency

In direct mode, a fast-ADC sample reaches the fast-DAC pins 7 clock cycles
(70 ns) after it reaches the FPGA pins:

| stage | cycles |
|---|---|
| `fadc_driver` (pin register + format) | 2 |
| `stream_mux` | 1 |
| `transfer_function` (all modes) | 3 |
| `fdac_driver` | 1 |
| `delay_line` (compensation delay, set to 0) | 0 |

The converters' own pipelines add to this. The measured converter-to-converter
latency of the real board, conversions included, is of the order of 200 ns.

## Blocks

| module | what it does |
|---|---|
| `hq_pkg` | sample/stream types, channel indices, MUX and mode encodings, link word format, register map, `cfg_t` and `status_t` |
| `slave_fpga` | top: wires everything below |
| `config_bus` | serial slave for the master's configuration bus; register file and read-back |
| `stream_mux` | per-output source select |
| `transfer_function` | per-output off / direct / PID |
| `delay_line` | per-output latency-compensation delay |
| `sink_memory` | 4 record buffers + 6 analog and 1 digital playback buffer, master access |
| `playback_buffer`, `record_buffer` | one buffer each (used by `sink_memory`) |
| `link_controller` | parallel side of the serial link: decode received words, arbitrate transmitted ones |
| `fadc_driver` | dual fast ADC capture, offset binary to 18-bit two's complement |
| `padc_driver` | precise-ADC conversion timing and serial read-out |
| `pdac_driver` | precise-DAC SPI frames, latest value wins |
| `fdac_driver` | round/saturate to the 16-bit fast-DAC word, hold |
| `dds_driver` | DDS parallel-port word and destination, zero-amplitude switch-off |
| `photon_counter` | gated edge counting and time tagging of a digital input |

### Sink memory: how sequences run

The block RAM is split evenly. Each of the 4 inputs and 6 outputs gets one
buffer of `DEPTH` = 24576 x 18 bits (442 kbit, just under a tenth of 4.5 Mb).
A seventh playback buffer of 4096 x 6 bits holds digital-output sequences.
In total that is 4.45 Mbit.

A playback buffer is loaded by the master over the link and controlled over
the configuration bus:

* `length`: number of words in the sequence.
* `divider`: the buffer issues one word every `divider+1` clocks. Use 0 for a
  fast channel and 999 for 100 kSa/s on a precise DAC.
* `loops`: number of repetitions; 0 means forever.
* start and stop: one bit per buffer. Any subset of buffers can start in the
  same clock, which keeps them aligned sample for sample.

Each buffer runs on its own. One group of channels can loop a short ion
sequence while another group runs a long atom-loading ramp, and the master can
overwrite a third channel directly at any time. Between words and after the
end, a channel holds its last value. The first word appears 2 clocks after
the start pulse.

A record buffer is armed over the configuration bus. It then stores the next
`length` valid samples of its input and raises `done`. The master reads the
buffer over the link.

A sequence longer than a buffer must be streamed by the master (MUX source
"master"). The master board has the larger memory.

### The serial link to the master

The FPGA's transceiver (hard IP, not in this RTL) exchanges one 32-bit word
per 100 MHz clock in each direction, i.e. 3.2 Gb/s. That is the highest rate at
which the board's link ran without errors. Words are `{type[3:0], ch[3:0],
payload[23:0]}`:

| type | master -> slave | slave -> master |
|---|---|---|
| 1 `LK_STREAM` | sample for output `ch` (MUX source "master") | sample of input `ch` |
| 2 `LK_MEM_WR` | write `payload[17:0]` into playback buffer `ch`, pointer +1 | - |
| 3 `LK_MEM_PTR` | set the write pointer of playback buffer `ch` | - |
| 4 `LK_MEM_RD` | read record buffer `ch` at `payload[15:0]` | the read data, `ch` of the request |
| 5 `LK_TAG` | - | photon time tag: bit 27 input index, bits 26:0 tag |

The slave sends at most one word per clock. The transmit side uses a fixed
priority:

1. Read data. Read requests arrive at most one per clock, so read data is
   never delayed or lost.
2. Photon time tags, taken from each counter's FIFO by ready/valid.
3. Input samples, for the inputs enabled in `A_STREAM_EN`, keeping one valid
   sample in every `A_STREAM_DEC+1`. Each input has a one-word holding
   register, and the inputs are served round robin.

A kept sample that finds its register still full is dropped. The number of
dropped samples and tags can be read at `A_DROPS`. Both fast ADCs together
produce twice what the link carries, so full-rate streaming of both to the
master must be decimated. Data sent from one board to another through the
master therefore arrives at a lower rate than data that stays on one board.

### Configuration bus

The configuration bus is a 4-wire serial slave, SPI mode 0. `cfg_sclk` runs at
no more than clk/8, and the inputs are synchronised to the FPGA clock. A frame
is 40 bits, MSB first: `{rw, addr[6:0], data[31:0]}`.

* Write (`rw` = 0): the write takes effect 3 clocks after the last rising
  `cfg_sclk` edge.
* Read (`rw` = 1): the slave shifts the register out on `cfg_miso` during the
  32 data bits.
* A frame cut short by `cfg_cs_n` rising is ignored.

Register map (`hq_pkg`):

| address | register |
|---|---|
| 0x00 | identifier (read only) |
| 0x01 / 0x02 | start / stop playback buffers, bit mask [6:0] (pulse) |
| 0x03 | arm record buffers, mask [3:0] (pulse) |
| 0x04 | digital outputs: [5:0] static value, [8] = 1 take them from the playback buffer |
| 0x05 / 0x06 | input streams to the master: enable mask [3:0] / decimation |
| 0x07 | photon gate length (clocks) |
| 0x08 | photon counters: [1:0] count enable, [3:2] tag enable |
| 0x09 / 0x0A | counts of the last gate, din0 / din1 (read only) |
| 0x0B | samples and tags dropped on the link (read only) |
| 0x0C | DDS: [1:0] enable, [3:2] DDS1 destination, [5:4] DDS2 destination |
| 0x0D | [6:0] playback running, [11:8] record done (read only) |
| 0x10 + 8o + k | output o (0..5): k = 0 MUX address, 1 mode, 2 kp, 3 ki, 4 kd, 5 set point, 6 shift, 7 delay |
| 0x40 + 4p + k | playback buffer p (0..6): k = 0 length, 1 divider, 2 loops |
| 0x60 + r | record buffer r (0..3) length |

MUX address: 0-3 inputs FADC1, FADC2, PADC1, PADC2; 4 sink memory; 5 master;
7 nothing. Mode: 0 off, 1 direct, 2 PID. After reset every output has no
source and is off, and every DDS is disabled.

### Transfer function and PID

With `e[n] = setpoint - x[n]` the PID computes

    I[n] = sat48(I[n-1] + ki*e[n])
    y[n] = sat18((kp*e[n] + I[n] + kd*(e[n] - e[n-1])) >>> shift)

The gains are signed 18-bit. `shift` (0-63) sets the gain scale, so
`kp = 2^shift` is unity. The integrator is cleared whenever the mode is not
PID. A typical use: a fast ADC measures a quantity and a fast DAC corrects it,
with the MUX address and gains written once at the start. At 100 MSa/s with
a 7-clock loop inside the FPGA, regulation bandwidths above 1 MHz are within
reach. A loop that passes through the master is slower.

### Converter drivers

The paper names the converter chips but not how the drivers talk to them. The
drivers follow the chips' usual interfaces:

* **Precise ADC** (`padc_driver`): `cnv` goes high every `RATE_DIV` = 1000
  clocks (100 kSa/s) and stays high for the conversion time, 72 clocks. The
  driver then reads 18 bits on `sck` (clk/4), MSB first. A sample is ready
  144 clocks after `cnv` rises.
* **Precise DAC** (`pdac_driver`): at start-up one control frame (0x200002)
  releases the output clamp and selects two's complement. Each sample is
  then a 24-bit frame `{0, 001, data, 00}` taken on falling `sclk` (clk/8).
  `ldac_n` pulses one clock after `sync_n` rises. A frame takes about 2 us.
  A sample that arrives during a frame waits, and a newer one replaces it.
* **Fast ADC** (`fadc_driver`): full-rate parallel words in offset binary.
* **Fast DAC** (`fdac_driver`): two's complement, rounded half up, saturated.
* **DDS** (`dds_driver`): 16-bit word and 2 destination bits per clock.
  - Destination 00 (amplitude): negative samples are clamped to 0.
  - Other destinations: the sample is offset by half scale.
  - Disabled: the port sends amplitude 0, so the RF output is null by
    construction. This is how a DDS is switched off quickly.

### Latency compensation

The DDS, fast-DAC and precise-DAC chips each have an internal pipeline of the
order of 100 ns, and these pipelines differ. Outputs written in the same clock
would therefore change at different times. Each output channel has a delay
stage (`delay_line`) between its transfer function and its driver. The delay is
written at register offset 7, from 0 to 64 clocks. The master sets it per
channel so that every channel's total latency is the same. The residual error
is then under one clock, i.e. within +-5 ns.

* Delay 0 passes the stream straight through and adds no register.
* Delay 1 uses a plain register.
* Larger delays use a 64-word circular buffer in block RAM, read synchronously.
  The RAM has no reset. After reset, or after the delay changes, the output
  stays not-valid until the buffer holds `delay` fresh words, so no stale
  word is ever issued.

### Photon counting

A photon detector's pulses can go straight to a digital input. A two-flop
synchroniser and an edge detector at 100 MHz resolve 10 ns, so a pulse must
be high for at least one clock. The board can double its clock to 200 MHz
(5 ns) with the FPGA's PLL, which lets it see 9 ns detector pulses reliably.
That PLL option is not built here, so this RTL counts in the 100 MHz domain.

* Counting: edges are counted in back-to-back gates of `A_GATE` clocks, and
  the last gate's total can be read back.
* Time tags: each edge's 27-bit clock count goes through a 16-deep FIFO to the
  link. This moves tags off the board to the master's memory. A FIFO overflow
  is counted as a drop.

Tags can also be imagined stored on chip for a short run and read later. This
design does not do that, because every sink-memory buffer already belongs to a
channel. All tags go to the master, which has the larger memory.

## What follows the paper and what does not

The following come from the paper:

* the tree of masters and slaves, and the board's channels, rates and
  resolutions
* the block structure of the FPGA: a MUX and a transfer function per output,
  fed from the inputs, the sink memory or the master, a transceiver to the
  master and a separate slower configuration bus
* a sink memory of up to a tenth of the device memory per channel
* PID regulation with gains and MUX addresses set over the configuration bus
* DDS switch-off by zero amplitude
* photon counting on a digital input with time tags sent off-board
* the 100 MHz clock, and the 3.2 Gb/s link rate
* compensating the converters' different latencies inside the FPGA

This design's own choices:

* the sample format, the register map and the configuration bus protocol
* the link word format, its priorities and decimation
* the per-channel buffer organisation and its controls (divider, loops,
  start masks)
* the digital-output playback buffer
* the PID equation, its widths and the fixed 3-clock latency
* all converter protocol details, which come from the chips' data sheets
  rather than the paper
* the photon-counter gate scheme and FIFO
* compensation as a whole-clock delay per output, up to 64 clocks

Not in the RTL:

* the master board (a SoC with a processor, LAN and external memory)
* the transceiver PHY
* the PLL doubling to 200 MHz
* the Vernier delay line for ~100 ps resolution, which the paper mentions as
  an option
* the clock fan-out, the analog front ends and the power regulators

## Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb/ad7982_model.sv` and `tb/ad5780_model.sv`
are behavioural models of the serial converters, used by the driver tests and
the top-level test. `slave_fpga_tb` runs the whole FPGA at its default sizes
for about 44,000 clocks and makes each mechanism happen at least once:

* a direct ADC-to-DAC stream, with its 7-clock latency checked
* the same stream with 12 clocks of compensation delay (19 clocks)
* a PID loop closed through a simulated plant that settles on its set point
* a sequence loaded over the link and played in loops on a precise DAC at
  100 kSa/s, while a second loop runs on a DDS
* a real-time value from the master sent to a DDS during those loops
* a DDS switched off by zero amplitude
* precise-ADC samples recorded and read back over the link
* overloaded input streams with the dropped samples counted
* photon counts and time tags
* digital outputs from a stored sequence and from the static register

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
      rtl/hq_pkg.sv rtl/*.sv tb/ad7982_model.sv tb/ad5780_model.sv \
      tb/slave_fpga_tb.sv --top-module slave_fpga_tb -o sim
    ./obj_dir/sim

List `hq_pkg.sv` first. `-Wno-fatal` is needed because lint reports unused
package constants and unused status bits as warnings. The full test builds
in under a minute and runs in well under a second. For a block test, give only that block's files, or
all of `rtl/`, with `--top-module <block>_tb`.

Parameters of `slave_fpga`:

* `MEM_DEPTH` (24576): words per analog buffer.
* `DIG_DEPTH` (4096): words of the digital buffer.
* `PADC_DIV` (1000): clocks per precise-ADC sample.

Smaller memories simulate faster. The default sizes synthesise to about 4.45
Mbit of RAM.

## Known limits

* There is no clock-domain crossing inside the design. The configuration bus
  inputs and the digital inputs are synchronised; everything else is assumed
  synchronous to the common 100 MHz clock, as on the board.
* Link words are not protected by any check beyond what the transceiver does,
  and there is no flow control towards the master. Master-to-slave words are
  all taken at once, and slave-to-master words are dropped and counted when
  the link is full.
* The fixed-priority transmit arbiter lets a continuous stream of read
  requests or tags starve the input streams.
