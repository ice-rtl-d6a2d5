# ICE motherboard firmware: CHIME F-engine back end, timing and board control

ICE is a family of FPGA motherboards (one Xilinx Kintex-7 and an ARM
co-processor per board) that are stacked sixteen to a crate behind a passive
backplane. The backplane wires every board to every other board, fans out a
10 MHz reference and an IRIG-B time code to all slots, and lets a board read
which slot it sits in. In the CHIME radio telescope each board digitizes 16
analog inputs at 800 MSPS, channelizes them, and starts a three-stage
"corner turn". Afterwards each GPU node of the correlator holds every input for
a few frequency bins, not a few inputs for every bin.

This RTL is the part of that firmware that sits around the channelizer. It
covers what one board does to its data and its timing:

* **Array synchronization.** Every board of the array must start sampling
  on the same 10 MHz edge. It must also tag every frame with the same counter
  value.
* **Gain and requantization.** Each frequency bin gets a complex gain. The
  result is then reduced to 4+4 bit complex values.
* **First corner-turn stage.** Each frame is split into 16 packets, one
  for each board of the crate. Each packet holds all 16 inputs for 1/16 of
  the bins.
* **Board services.**
  * a register map that the ARM reaches over SPI
  * an IRIG-B decoder and encoder
  * sync clocks for the nine switching regulators
  * a heartbeat LED

The polyphase filter bank and FFT come from an outside library. They are not
part of this RTL: their output enters the top level as ports. The multi-gigabit
transceivers are not part of it either; the packets leave the top level as
16 word streams. The later corner-turn stages are also left out: the swap
between crates and the streams to the GPUs.

## Block overview

```
            ARM (SPI) ──> spi_slave ──reg bus──> ice_regs ──> control / gain writes
                                                     ^
 backplane TIME ──> irigb_decoder ──time──> frame_timing <── backplane CLK (10 MHz)
                         │                      │  adc_sync, frame_start, sample_idx
                         └── pps                ├──> buck_sync (9 regulator clocks)
                                                └──> ct_packetizer (frame counter reset)
 channelizer output (16 inputs x 18+18 bit, 1 bin/clock)
        ──> gain_quant x16 ──4+4 bit──> ct_packetizer ──> 16 links x 128-bit words
 irigb_encoder ──> irig_out       heartbeat ──> led (fast blink when not locked)
```

| file | role |
|---|---|
| `rtl/ice_pkg.sv` | shared sizes, the IRIG-B time struct, register-bus struct, 4+4 bit sample type |
| `rtl/irigb_decoder.sv` | IRIG-B pulse-width decoder: time, lock, on-time pulse |
| `rtl/irigb_encoder.sv` | IRIG-B generator |
| `rtl/frame_timing.sv` | arm / target time / 10 MHz edge / delay sequencer, frame counter, time capture |
| `rtl/buck_sync.sv` | nine phase- and frequency-programmable regulator sync clocks |
| `rtl/heartbeat.sv` | LED blinker |
| `rtl/spi_slave.sv` | SPI to register-bus bridge |
| `rtl/ice_regs.sv` | register map |
| `rtl/gain_quant.sv` | complex gain, rounding, clipping to 4+4 bits (one per input) |
| `rtl/ct_packetizer.sv` | first corner-turn stage |
| `rtl/ice_fengine_top.sv` | one motherboard, all of the above wired together |

Defaults are the CHIME numbers:
* 16 inputs, 2048-sample frames and 1024 bins kept per frame;
* 16 links and a 48-bit frame counter;
* nine regulators synchronized at 1 MHz;
* a 200 MHz processing clock, which is 4 ADC samples per clock.

## Timing: how a whole array starts on the same sample

This is the subtle part of the design. Every board receives the same 10 MHz
reference and the same IRIG-B time code over the backplane. Software arms
every board with the same target time. Each board then does the following on
its own (`frame_timing`):

1. **ARMED.** It waits until the IRIG-B decoder reports a complete frame whose
   time equals the target. The decoder reports a frame when its final marker
   ends, and that moment is the same on every board to within the decoder's
   synchronizer latency.
2. **WAIT_EDGE.** It waits for the next rising edge of the 10 MHz reference. A
   two-flop synchronizer samples that edge. Every board therefore resolves the
   same edge, so the boards agree to the exact 100 ns period even though their
   IRIG-B detections may differ by a cycle.
3. **DELAY.** It waits a programmable number of clock cycles, `SYNC_DELAY`
   (0–255). This compensates for the different trace lengths to the ADC chips.
4. **RUN.** It pulses `adc_sync` for one cycle. The sample index and the
   48-bit frame counter start from zero. `frame_start` marks the first clock
   of every 2048-sample frame (512 clocks at 4 samples per clock).

`adc_sync` rises exactly `4 + SYNC_DELAY` clock cycles after the reference
edge. Two of those cycles are the synchronizer, and the testbenches check this
number.

Arming again stops framing and runs the sequence over. The same `adc_sync`
pulse also clears the packetizer's frame counter and re-aligns the regulator
clocks. As a result, all boards also switch their regulators in step.

**Capture.** A capture request latches three values together at the next
decoded IRIG-B time: that time, the frame counter and the sample index. Software
can then map frame numbers to absolute time.

**IRIG-B decoding** (`irigb_decoder`) measures the length of each high pulse:
* under 1 ms is a glitch;
* under 3.5 ms is a 0;
* under 6.5 ms is a 1;
* under 9.5 ms is a position marker.

Two markers in a row mark the start of a frame: the last marker of one frame
and the reference marker of the next. Markers must then fall on cells 9, 19,
…, 99. A misplaced marker, a bad pulse, or 12 ms without an edge drops the
frame and counts it in `bad_frames`. Seconds, minutes, hours, day of year and
two-digit year are decoded from their BCD fields. `on_time` (the `pps`
output) marks the rising edge of the reference marker, which is the instant
the decoded time refers to. The encoder (`irigb_encoder`) does the reverse,
one frame per second, from a time written by software. Neither block handles
the control field or the straight-binary seconds.

## Gain and requantization

`gain_quant` takes an 18-bit complex bin `x` and the complex gain `g` of that
input and bin. The gain is a 16-bit signed real part and a 16-bit signed
imaginary part, read from a 1024-entry table per input. It computes

```
y  = x * g                              (full-precision complex product)
re = clip( floor((Re y + 2^(SHIFT-1)) / 2^SHIFT), -7, +7 )
im = clip( floor((Im y + 2^(SHIFT-1)) / 2^SHIFT), -7, +7 )
out = {re[3:0], im[3:0]}                 (two's complement nibbles)
```

The pipeline is three clocks long: table read, multiply, then round and clip.
`sat` flags every clipped output, and the top ORs the flags of all lanes into
`sat_any`. The clip is symmetric (±7), so the nibble value −8 is never produced
and a zero-mean signal stays zero-mean. The fixed-point format of the gain is
set by `SHIFT`, which is 24 by default. With that setting, a gain of 2^24/2^17
maps a full-scale input to about ±1 LSB, and larger gains raise the level.

## First corner-turn stage

`ct_packetizer` receives one bin of all 16 inputs per clock as 16 × 8 bits.
Bin `b` belongs to link `b mod 16`, so each link gets every sixteenth bin.
The assignment is interleaved because each bin can then go out as soon as it
arrives, with no frame buffer. Each link sends one packet per frame:

| word | contents (128 bits) |
|---|---|
| 0 (sop) | `8'hA5`, source slot, link number, word count (64), 48-bit frame counter, zero padding |
| 1 … 64 | one bin: input 0 in the top byte … input 15 in the bottom byte |
| 64 carries eop | |

The header has to be sent before the link's first bin. That takes one extra
word slot, so the link's first bin is held for one clock. The first bin of
link `l` arrives at cycle `l`, and its header leaves at `l+1`. The held bin
then leaves at `l+2`, long before the link's next bin arrives at `l+16`. A
link therefore never has two words for the same clock, and an assertion checks
this. A start-of-frame that arrives before 1024 bins have passed sets the
sticky `frame_err`; the packetizer then starts over on the new frame.

The frame counter in the headers counts channelized frames since `adc_sync`.
Since every board syncs on the same edge, packets of the same frame from
different boards carry the same number.

## Register map (32-bit words, 15-bit word address)

| addr | name | access | contents |
|---|---|---|---|
| 0x000 | ID | R | `0x1CE0_0001` |
| 0x001 | CONTROL | W pulses | bit0 arm, bit1 capture, bit2 regulator resync |
| 0x002 | STATUS | R / W1C | [31:16] bad IRIG-B frames, 4 frame error (write 1 to clear), 3 capture valid, 2 running, 1 armed, 0 IRIG-B locked |
| 0x003 | TARGET_TIME | RW | {day[25:17], hour[16:12], min[11:6], sec[5:0]} |
| 0x004 | TARGET_YEAR | RW | [6:0] |
| 0x005 | SYNC_DELAY | RW | [7:0] cycles |
| 0x006/0x007 | CAP_FRAME | R | captured frame counter, low / high 16 |
| 0x008 | CAP_TIME | R | captured time (layout as TARGET_TIME) |
| 0x009 | CAP_EXTRA | R | {sample index [26:16], year [6:0]} |
| 0x00A | LAST_TIME | R | last decoded time |
| 0x00B | SLOT | R | backplane slot number |
| 0x00C | BUCK_ENABLE | RW | [8:0], all on after reset |
| 0x00D | ENC_CTRL | RW | bit0 IRIG-B encoder on |
| 0x00E/0x00F | ENC_TIME / ENC_YEAR | RW | time the encoder sends |
| 0x010+i | BUCK_CFG i | RW | {phase[31:16], divider[15:0]}, divider < 2 means 200 (1 MHz) |
| 0x020/0x021 | FRAME_CTR | R | frame counter, low / high 16 |
| 0x4000 + input·1024 + bin | GAIN | W | {imag[31:16], real[15:0]} |

The register bus is a struct (`reg_req_t`: `wr`, `rd`, `addr`, `wdata`). Read
data is registered and valid the clock after `rd`.

**SPI frame** (mode 0, MSB first, 56 bits): 1 read/write bit (1 = read), 15 address
bits, 8 turnaround bits, then 32 data bits, in or out. The slave oversamples
SCLK in the processing clock. It issues the read after address bit 15, so the
data is ready long before bit 24. At 40 Mbit/s against 200 MHz there are 5
clocks per bit, which is what the tests use.

## Regulator sync and heartbeat

Each of the nine `buck_sync` channels runs a counter modulo its divider. The
output is high while `(count − phase) mod divider` is below half the divider.
Each channel therefore has its own frequency and phase. `resync`, or any array
sync, clears all counters at once. The heartbeat LED toggles every
`CLK_HZ/2` cycles, which is a 1 Hz blink. While the IRIG-B decoder is not
locked, it blinks four times faster.

## Verification

Each block has a self-checking testbench in `tb/`. The testbench compares the
block with an independent model and ends by printing
`TB_RESULT checks=N failures=M`. Most run at reduced sizes, such as fewer
clocks per millisecond or fewer bins, to keep simulation short.

| testbench | what it checks |
|---|---|
| `tb_irigb_decoder` | decoded fields, on-time instant, lock, recovery after a corrupted frame, gap timeout |
| `tb_irigb_encoder` | every cell's pulse width against an independent encoding of the time |
| `tb_frame_timing` | sync latency `4 + delay` after the reference edge, frame length, counter, capture, re-arm |
| `tb_buck_sync` | every output sample against `(k − phase) mod div < div/2`, resync, enable, default divider |
| `tb_heartbeat` | toggle periods, normal and fault |
| `tb_spi_slave` | reads and writes at 5 clocks per SPI bit, back-to-back frames |
| `tb_ice_regs` | every register, write pulses, gain write decoding |
| `tb_gain_quant` | rounding and clipping against a 64-bit model, pipeline latency, table writes |
| `tb_ct_packetizer` | every word of every link against a model, header fields, frame error |
| `tb_ice_fengine_top` | end to end at reduced size (see below) |
| `tb_ice_fengine_full` | end to end at every default size |

`tb_fe_driver` holds the end-to-end stimulus and checker. Both top-level tests
share it, and it runs these steps:
1. Read the ID over SPI.
2. Load a random gain for every input and bin over SPI, 16 384 writes.
3. Program a target time, a sync delay and a regulator phase, then arm.
4. Send IRIG-B frames.
5. Check that `adc_sync` falls exactly `4 + delay` clocks after the 10 MHz
   edge that follows the target frame.
6. Feed whole channelized frames, and check every packet word on every link
   against a reference model of gain, rounding, clipping and packetization.
7. Send a short frame to trigger the frame error.
8. In the reduced test only, check the IRIG-B capture.

It counts each mechanism and fails if any count is zero: sync, capture,
clipping, frame error, LED toggles, regulator edges at the programmed period,
encoder pulses and the on-time pulse.

Test sizes:
* **`tb_ice_fengine_top`** runs with 64 bins and a 20 kHz "clock". The slower
  clock shortens the IRIG-B second, and this test includes the capture.
* **`tb_ice_fengine_full`** uses the top module with no parameter overrides:
  a 200 MHz clock and 1024 bins. It simulates about 0.21 s of board time,
  which is one IRIG-B second plus the gain load. That takes about 4–5
  minutes in Verilator. It leaves out the capture, which would need a second
  IRIG-B second of simulation.

To run one test with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/ice_pkg.sv tb/tb_ice_fengine_top.sv --top-module tb_ice_fengine_top
./obj_dir/Vtb_ice_fengine_top
```

## Where this design departs from, or goes beyond, the description

* **Throughput.** At 800 MSPS each input produces 400 M bins/s. This datapath
  takes one bin per input per clock, which is 200 M bins/s at 200 MHz. A
  board running at full CHIME rate needs two bins per clock: double the
  `gain_quant` lanes and widen the packetizer input. The alternative is a
  400 MHz clock. The function and the packet format do not change.
* **Choices made here.** The description leaves these open:
  * which bins go to which board (interleaved here);
  * the packet header;
  * the register map and SPI framing;
  * rounding with a symmetric ±7 clip, where the description only says the
    data are "rescaled and truncated";
  * the gain format;
  * the IRIG-B thresholds;
  * the exact instant that counts as "following the target timestamp". Here
    it is the end of the decoded target frame.
* **Sixteen links.** The packet for the board's own slot is sent on a link
  like the other fifteen. A real backplane has 15 links plus the board
  itself.
* **Not included:**
  * PFB and FFT
  * transceivers and 10 GbE
  * corner-turn stages 2 and 3 (crate-to-crate exchange and GPU streams)
  * ADC capture
  * FPGA clock generation, and any use of the backplane trigger line
  * I2C monitoring and the slot reset and power control
  * the bolometer readout firmware, which runs on the same boards
