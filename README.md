# A 32-channel shifted-clock TDC on one FPGA, in SystemVerilog

A muon spin rotation (µSR) spectrometer measures how long each positron
from a muon decay takes to reach a detector, counted from the moment the
muon beam pulse enters the sample chamber. The beam's arrival is the
**start**. Each detector hit is a **stop**. This RTL is a time-to-digital
converter (TDC) with one start channel and 32 stop channels. It runs
inside a single FPGA, together with the readout and the control of the
front-end electronics.

A stop channel measures with two counters:

* a **coarse count** of a 200 MHz clock: 16 bits of 5 ns, so the range is
  2^16 × 5 ns = 327.68 µs;
* a **fine count** of 4 bits, which says where within the 5 ns period
  the edge fell, in 312.5 ps bins.

The fine count uses **shifted-clock sampling**. Eight copies of the
200 MHz clock are spaced 22.5° apart. The input goes to 16 flip-flops.
Eight of them capture on the rising edges of the eight clocks, and eight
on the falling edges. Together they sample the input every
5 ns / 16 = 312.5 ps.

The published design gives the block diagram, the widths and depths, and
the sampling scheme. The interfaces, encodings, register map and several
control rules here are this implementation's own choices. Each one is
listed under *Where this RTL makes its own choices* below.

## Data flow

```
 clk_ph[0..7] (8 x 200 MHz, 22.5° apart, from PLLs outside this RTL)
        │
 start ─┴─► start_channel ──► start time stamp, epoch bit ─┐
                 ▲                                         │
 coarse_counter ─┼─────────────────────────────────────────┤
 time_tag ───────┼─────────────────────────────────────────┤
                 ▼                                         ▼
 stop[i] ─► phase_sampler ─► fine_encoder ─► (stop − start) ─► shielding / time window
            (16 FFs)         (edge → 4-bit fine)               │
                                                               ▼
                                hit_buffer (512) ─► trigger_counter ─► readout FIFO (64)
                                                    (keep/discard,      (record + time tag)
                                                     8-bit count)            │
          32 × tdc_channel ───────────────────────────────────────────────────┘
                 │
                 ▼
 channel_coding (round robin, 7-bit channel number) ─► data_packing (64-bit word)
                 ─► output FIFO (1024 × 64) ─► m_valid/m_ready/m_data  (to the Ethernet MAC)

 cfg_wr/addr/wdata ─► config_regs ─► shielding, window, trigger mode, channel base
                                  ─► selfcheck_dac_ctrl ─► self-check start pulse, fe_selfcheck, DAC serial
 lost hit / reset request ─► error_detect ─► tdc_rst (resets the whole TDC core)
```

`tdc_top` wires all of these together. The top has plain ports. The eight
clocks come in as `clk_ph[7:0]`. The Gigabit Ethernet MAC sits outside
this RTL, with two connections to it:

* a 64-bit valid/ready stream (`m_*`) carrying the data words;
* a 32-bit register port (`cfg_*`).

## Turning 16 samples into a time

`phase_sampler` registers the 16 samples into one 16-bit word on the next
rising edge of `clk_ph[0]`. In that word, `word[k]` is the input level
k × 312.5 ps into the period.

`fine_encoder` appends the last sample of the previous word below bit 0.
It then finds the first 0→1 step, and the position of that step is the
fine count. The stamp is `ts = {coarse, fine}`, 20 bits wide.

Only the first rising edge in each 5 ns period is reported. A channel
therefore accepts one hit per clock.

The start channel uses the same sampler and encoder, on the same coarse
counter. The time stored for a stop is `(ts_stop − ts_start) mod 2^20`.
The pipeline delay is the same for start and stop, so it cancels in the
difference. The coarse counter never needs to be reset at a start.

The testbenches check this exactly. Stops placed d bins after a start,
with d random and off any sampling edge, read back as d.

On the FPGA the input reaches the 16 flip-flops through a balanced tree
of 15 identity LUTs (1 + 2 + 4 + 8). The tree keeps the routing skew to a
few picoseconds. It is purely a placement device with no logic function,
so it does not appear in the RTL. Keeping the bins linear takes placement
and timing constraints for the sampler flip-flops. Likewise, retiming the
late phases through an intermediate clock phase, to meet setup time, is
left to the implementation. In RTL a single `clk_ph[0]` register does the
retiming.

## Trigger decision and the epoch bit

Hits of one beam pulse wait in a 512-deep **hit buffer**, one buffer per
channel, until the trigger decides about them. There are two trigger
modes, set by CTRL[0]:

* **external trigger**: a trigger event is the rising edge of the `trig`
  input, synchronised by two flip-flops;
* **self-trigger**: every start is a trigger event.

Every start flips an **epoch** bit. Each hit is stored together with the
epoch it arrived in. Each trigger event does two things:

* it adds one to the 8-bit trigger count;
* it marks the current epoch as triggered.

On every clock, each channel's `trigger_counter` looks at the head of its
hit buffer:

| head's epoch                   | action                                           |
|--------------------------------|--------------------------------------------------|
| triggered                      | move it to the readout FIFO, with the trigger count and time tag |
| closed (a newer start came), never triggered | discard it                         |
| still open, not yet triggered  | wait                                             |

The state holds one flag per epoch parity. A pulse's hits must therefore
leave the buffer before the next-but-one start. Draining 512 hits takes
about 2.6 µs, against tens of milliseconds between beam pulses.

A hit is dropped before the hit buffer in any of these cases:

* its channel is shielded;
* no start has been seen since reset;
* its time lies outside the window `[WIN_LO, WIN_HI]` (inclusive, in bins).

## Records and words

The readout FIFO holds 54-bit records:

* trigger count, 8 bits;
* time tag, 26 bits;
* time, 20 bits.

The time tag counts seconds. By default it is derived from the 200 MHz
clock (`TAG_DIV` = 200,000,000).

`channel_coding` empties the 32 readout FIFOs round robin. It adds the
channel number, `CH_BASE + index`, which identifies the channel within a
128-channel system built from four boards. `data_packing` then forms the
64-bit word:

| bits   | field                       |
|--------|-----------------------------|
| 63:61  | marker `3'b101`             |
| 60:54  | channel number              |
| 53:46  | trigger count               |
| 45:20  | time tag (s)                |
| 19:0   | time, 312.5 ps bins         |

## Control

Registers are 32 bits wide. A write takes effect on the clock edge where
`cfg_wr` is high. Reads are combinational on `cfg_addr`.

| addr      | register | meaning |
|-----------|----------|---------|
| 0x00      | CTRL     | [0] self-trigger, [1] self-check on, [2] write 1 to request an error reset |
| 0x01      | SHIELD   | bit i shields Stop[i+1] |
| 0x02/0x03 | WIN_LO/WIN_HI | time window in bins (reset: full range) |
| 0x04      | SC_PER   | self-check period in 5 ns clocks |
| 0x05      | CH_BASE  | channel number of Stop[1] |
| 0x06      | ERR_CNT  | read-only count of error resets |
| 0x20+i    | DAC[i]   | 16-bit threshold of Stop[i+1] |

**Self-check.** While self-check is on:

* `fe_selfcheck` tells the front-end to emit test pulses on its channels;
* the design sends a 4-clock `sc_start` pulse every SC_PER clocks, ORed
  into the TDC start.

The whole chain can then be exercised without detectors, and each
channel's delay can be calibrated.

**DAC thresholds.** Writing a DAC register queues that channel's
threshold. It is then sent as a 24-bit serial frame {channel, value}, MSB
first:

* `dac_csn` is low for the whole frame;
* data is sampled on the rising edge of `dac_sclk`, which runs at clk/8.

**Error detection.** The following errors hold the TDC core in reset for
16 clocks:

* a hit lost to a full hit buffer;
* a reset request through CTRL[2].

The core here is everything in `tdc_core` plus the readout chain. The
configuration registers and the output FIFO keep their contents.

## Parameters

| module | parameter | default | source |
|--------|-----------|---------|--------|
| tdc_top / tdc_core | N_CH | 32 | design |
| tdc_pkg | COARSE_W, FINE_W, TIME_W | 16, 4, 20 | design |
| tdc_pkg | TAG_W, TRIG_W, CHID_W, WORD_W | 26, 8, 7, 64 | design |
| tdc_top | HB_DEPTH | 512 | design |
| tdc_top | RO_DEPTH, OUT_DEPTH | 64, 1024 | own choice |
| tdc_top | TAG_DIV | 200,000,000 | own choice (1 s) |
| tdc_top | RST_CYCLES | 16 | own choice |
| selfcheck_dac_ctrl | DAC_W, SCLK_DIV, PULSE_CYC | 16, 4, 4 | own choice |

## Where this RTL makes its own choices

* The start-time subtraction, the epoch rule and the self-trigger meaning
  ("the start is the trigger").
* The errors that count for error detection.
* Where the shielding and window cut sit in the chain: before the hit
  buffer.
* The 64-bit layout and its marker.
* The register map.
* The DAC serial format. The front-end's DAC interface is not specified,
  so this format must be matched to the real front-end.
* The depths of the readout and output FIFOs.
* The source of the time tag.
* The output FIFO shares the TDC clock. A real 125 MHz MAC clock would
  need a clock-crossing FIFO in its place.
* Not included: the PLLs (vendor primitives; the simulation uses a
  behavioural clock model), the LUT fan-out tree, and the Ethernet MAC.

## Simulation

All testbenches share one time convention: 1 tick = 31.25 ps. The clock
period is 160 ticks and one bin is 10 ticks. `tb/phase_clock_model.sv`
generates the eight phase clocks. Every testbench is self-checking and
ends with `TB_RESULT checks=N failures=M`.

To build and run one testbench:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tdc_pkg.sv tb/tb_tdc_top.sv --top-module tb_tdc_top
./obj_dir/Vtb_tdc_top
```

`tb_tdc_top` runs the whole design at its default size: 32 channels and
512-deep buffers. It completes in a few seconds. It checks every output
word against the programmed intervals, and it exercises and counts these
mechanisms:

* triggered pulses kept, untriggered pulses discarded;
* shielding and window rejects;
* self-trigger mode with the self-check pulse as start;
* DAC frames;
* output back-pressure;
* an overflow-caused error reset, and a requested error reset.

`tb_interval_sweep` repeats the bench timing test the design was
characterised with, on the full design:

* a start and a stop on Stop[1];
* the interval stepped 27 times by 200 ps, starting at 100 ns;
* each interval measured 16 times, at random clock phases.

It uses a finer tick of 6.25 ps, so that the 200 ps steps are whole
ticks. Each result must equal the exact quantisation of the two edges.
Each mean must lie within half a bin of the true interval. The fitted
slope must be 1 ± 1 %; the run gives 0.9992. This tests the logic only.
The precision of a real device depends on the bin widths that placement
achieves, which RTL simulation cannot show.

The other testbenches each check one module: `tb_<module>.sv`, plus
`tb_sync_fifo` for the FIFOs.

## Channel delay calibration

The self-check mode supplies the measurements needed to calibrate each
channel's delay: the same test pulse reaches every channel at a known
time. The RTL stores raw times. Subtracting per-channel offsets is left
to the acquisition software, and no offset table exists in the FPGA.
