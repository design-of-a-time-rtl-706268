# A radiation-tolerant 24-channel TDC for drift-tube readout

This is synthesizable SystemVerilog for the digital core of a time-to-digital converter
(TDC) chip. The chip reads out 24 drift tubes of a muon chamber. An amplifier/discriminator
chip in front of it turns each tube signal into a digital pulse. The leading edge of that
pulse marks when the first drift electrons reached the wire. The pulse width is a measure of
the signal charge.

The TDC time-stamps both edges of every pulse with a 0.78125 ns least count over a 17-bit
range (102.4 us). That range covers one accelerator orbit of about 89 us. It then ships the
results on two serial lines of 320 Mbps.

There are two ways to run the chip:
- **Triggerless mode** (the default): every hit is sent out as soon as it is digitised.
- **Triggered mode**: hits wait in a small buffer. Only those that fall inside a time window
  tied to an external trigger are sent, framed as events. This mode is for chamber tests and
  test beams.

The chip will sit inside a detector exposed to radiation. The logic that decides what the
chip does is therefore built from triple-modular-redundant (TMR) cells. That logic covers
configuration, TTC command decoding, FIFO pointers and the serial link. The bulk data paths
are not protected: sampling, hit storage and FIFO memories. A flipped bit there costs at
most one hit. A flipped bit in the control logic could hang the chip or put it in a wrong
mode.

```
             clk0/clk90 (320 MHz, 0/90 deg)                 clk160
 din[23:0] ─┬─► rising-edge slice ─┐                                            ┌──────────┐
            └─► falling-edge slice ┴► hit builder ─┬─► (triggerless) ──┐        │ readout  │
                                                   └─► ring buffer ──► │ chan   │ FIFO 16W │► serial ► sdata[1:0]
                                                       (16 words)      │ FIFO 4W│          │  8b/10b    2 x 320 Mbps
                                                       + matching ◄─┐  └───┬────┘          │
                                                                    │      ▼               │
 ttc ─► TTC decoder ─► trigger ─► trigger interface ─► trigger FIFO ─► event builder ──────┤
                      BCR/ECR/    ▲ (mux: TTC or pin)   16 entries     (triggered)         │
                      master rst  trig_pin                             channel mux ────────┘
                                                                       (triggerless, round robin)
 tck/tms/tdi/tdo ─► JTAG TAP ─► setup / control / status registers (TMR with scrubbing, CRC-8)
```

Everything left of the channel FIFOs exists 24 times. The figures are the RTL defaults.

## Measuring time: the TDC slice

Each channel has two slices, one per edge polarity (`tdc_slice`, parameter `RISING`). A slice
samples its input with four flip-flops:
- rising edge of the 0-degree 320 MHz clock;
- rising edge of the 90-degree 320 MHz clock;
- falling edge of the 0-degree clock;
- falling edge of the 90-degree clock.

These four samples are 781.25 ps apart. Together they cut each 3.125 ns clock period into
four bins.

On every rising edge of `clk0` the slice gathers the four samples of the period just ended, in
time order. It puts the last sample of the period before in front of them. The first
position where the wanted transition appears gives the 2-bit fine code. A 15-bit coarse
counter running on `clk0` gives the period. The measured time is `{coarse, fine}`, 17 bits.

An edge at time `t` therefore reads `ceil((t - E) / 0.78125 ns)` modulo 2^17. Here `E` is the
`clk0` edge at which the slice saw the bunch count reset (BCR). The coarse counter restarts
from 0 on the rising edge of BCR. BCR arrives once per orbit, so the time base stays aligned
and an upset counter heals itself.

The slice hands a result to the 160 MHz logic by holding the time in a register and toggling
a flag. This needs `clk160` to rise together with `clk0`, which is assumed of the PLL
providing the clocks. Each slice stores one result. A second edge of the same
polarity that arrives before the first has been taken replaces it. The 160 MHz side looks
every 6.25 ns, so only same-polarity edges a few nanoseconds apart are at risk. Real
discriminator pulses are much further apart than that.

## Hits and data words

The `hit_builder` of each channel turns slice results into 32-bit words. The leading-edge
slice has priority; a trailing edge in the same cycle is handled one cycle later.

- **Edge mode** (`pair_mode = 0`): one word per edge, of type *lead* or *trail*.
- **Pair mode** (`pair_mode = 1`, default): one word per pulse. The word holds the leading time
  and the width, which is trailing minus leading time in LSBs, saturated at 255. A leading edge
  whose trailing edge never came is dropped when the next leading edge arrives.

Data words (`tdc_pkg::data_word`):

| bits  | 31:30                                  | 29:25   | 24:8           | 7:0                            |
|-------|----------------------------------------|---------|----------------|--------------------------------|
| field | type: 00 lead, 01 trail, 10 pair, 11 event | channel | time (17 bits) | width (pair), 0 otherwise |

Event words in triggered mode (type 11):

| word    | bits 31:30 | 29 | 28:17    | 16:0                                        |
|---------|------------|----|----------|---------------------------------------------|
| header  | 11         | 0  | event id | window start time                           |
| trailer | 11         | 1  | event id | bits 16:12 zero, 11:0 number of hit words   |

## Triggerless readout

Hits go straight into a 4-word channel FIFO. The `channel_mux` is a round-robin arbiter. In
every 160 MHz cycle it moves one word from the next non-empty channel FIFO into the 16-word
readout FIFO, as long as that FIFO is not full. A channel FIFO written while full drops the
word and sets a sticky overflow flag, which is visible in the status register.

## Triggered readout and trigger matching

**Trigger source.** A trigger comes from the TTC line or from the dedicated `trig_pin`, chosen
by a setup bit. The pin is edge-detected.

**Trigger time.** The `trigger_interface` keeps a 17-bit time base in the same units as the
slices. It advances by 8 LSB per 160 MHz cycle. On BCR it is loaded with 4, the value that puts
it in step with the slices' coarse counters. The window start of a trigger is
`now - match_offset * 4`. `match_offset` and `match_window` are in 3.125 ns units. The time,
together with a 12-bit event id (cleared by event count reset), goes into a 16-entry trigger
FIFO.

**Ring buffer.** Each channel keeps its last 16 hit words in a `ring_buffer`. The oldest word
is overwritten when a new one arrives.

**Event building.** The `event_builder` takes one trigger at a time. Once no channel is still
scanning for a previous trigger, it:
1. pops the trigger and starts a match in all 24 channels;
2. writes the header;
3. drains the channel FIFOs in the order 0, 1, ..., 23;
4. writes a trailer with the number of hit words.

**Matching.** A channel scans all 16 ring-buffer entries and copies every word whose time `t`
satisfies `(t - window_start) mod 2^17 < match_window * 4` into its channel FIFO. The
modulo makes windows that cross the wrap of the time counter work. An entry is not removed
by matching, so overlapping windows can each report the same hit.

**Back-pressure.** A full channel FIFO stalls that channel's scan. A full readout FIFO stalls
the event builder. Nothing is lost in triggered mode except ring-buffer entries overwritten
before their trigger came.

## Serial output

`serial_interface` sends the readout FIFO on two lines. Each line carries 8b/10b symbols at
2 bits per 160 MHz cycle (320 Mbps), most significant bit first.
- **Byte split.** A word is split so that line 0 sends bytes 3 and 2 and line 1 sends bytes
  1 and 0, most significant byte first.
- **Throughput.** One word takes 10 cycles, which gives 16 M words/s.
- **Idle.** With nothing to send both lines carry the K28.5 comma. A receiver uses the comma
  to find symbol boundaries.

`encoder_8b10b` is the standard code with running disparity, including the alternate
encoding of D.x.7. The comma is the only control symbol used.

## TTC commands

The TTC line is idle low. A command is a start bit `1` followed by a 3-bit code, one bit per
160 MHz cycle, MSB first:

| code | command                          |
|------|----------------------------------|
| 1    | trigger                          |
| 2    | bunch count reset (BCR)          |
| 3    | event count reset (ECR)          |
| 4    | master reset                     |

Each command gives a one-cycle pulse in the cycle after its last bit. Master reset clears the
data path: channels, FIFOs, event builder, trigger interface and serial link. It does not
clear the configuration.

## JTAG configuration

An IEEE 1149.1 TAP (`jtag_tap`) with a 4-bit instruction register selects these data
registers:

| instruction | code | register                                                       |
|-------------|------|----------------------------------------------------------------|
| IDCODE      | 0001 | 32'h1DC0_2001 (default after reset)                            |
| SETUP       | 0010 | 51-bit setup register                                          |
| CONTROL     | 0011 | 3 bits `{ecr, bcr, soft_reset}`                                |
| STATUS      | 0100 | 16 bits, read only                                             |
| BYPASS      | 1111 | 1 bit                                                          |

Setup register, MSB to LSB (it is shifted in LSB first, so `triggered` enters first):

| field         | bits | reset value | meaning                                   |
|---------------|------|-------------|-------------------------------------------|
| match_offset  | 12   | 160 (500 ns)| trigger latency, 3.125 ns units           |
| match_window  | 12   | 80 (250 ns) | window width, 3.125 ns units              |
| chan_enable   | 24   | all 1       | a disabled channel drops its hits         |
| trig_from_pin | 1    | 0           | trigger from pin instead of TTC           |
| pair_mode     | 1    | 1           | pair mode instead of edge mode            |
| triggered     | 1    | 0           | triggered instead of triggerless          |

Status register, MSB to LSB:
- `setup_crc[7:0]`: CRC-8, polynomial x^8+x^2+x+1, initial value 0, over the 51 setup bits
  MSB first.
- 4 reserved bits.
- `pll_locked`.
- Channel FIFO overflow.
- Trigger FIFO overflow.
- Readout FIFO full.

Comparing the CRC with the one computed from what was written shows whether the
configuration has been corrupted.

The shift stages run on TCK. On Update-DR the shifted value is handed to the 160 MHz domain
through a toggle and a two-flop synchroniser. There it is loaded into the held register. The
control bits produce one-cycle pulses:
- `soft_reset` resets the data path;
- `bcr` and `ecr` are OR-ed with the TTC commands.

## Protection against single-event upsets

Two cells carry all protected state.

**`tmr_reg`, for flow control.** It has three registers, and each is fed by its own copy of
the next-state logic. Three majority voters produce three outputs, one per copy of the logic
downstream. Modules using it instantiate their next-state logic three times. These are
`sync_fifo`, `ttc_decoder` and `serial_interface`. An upset in one register, one voter or one
logic copy is outvoted and overwritten at the next clock edge. The three clock trees of a
full TMR scheme are one clock net in RTL; splitting them is left to the physical design.

**`tmr_scrub_reg`, for configuration.** This cell feeds the voted value back into all three
registers every cycle, except when a new value is loaded. Configuration is written rarely,
so without this feedback upsets could pile up until two copies were wrong. With it, an upset
lasts at most one cycle. The setup and control registers use it.

What is protected:
- setup and control registers;
- TTC decoder;
- the pointers, counters and flags of every FIFO (channel, trigger and readout FIFOs; not
  their memory);
- the whole serial interface state.

What is deliberately left unprotected, to save power:
- sampling flip-flops and coarse counters;
- hit builders and ring buffers;
- FIFO memories;
- trigger interface and event builder.

The status register has no storage of its own. It is captured from live signals at
Capture-DR, so there is nothing in it to triplicate.

## Clocks and resets

| clock    | frequency                  | drives                                             |
|----------|----------------------------|----------------------------------------------------|
| `clk0`   | 320 MHz, 0 degrees         | TDC slices                                         |
| `clk90`  | 320 MHz, 90 degrees        | TDC slices                                         |
| `clk160` | 160 MHz, aligned with `clk0` | everything else except JTAG                      |
| `tck`    | JTAG clock                 | TAP and the configuration shift stages             |

All three fast clocks come from a PLL outside this core.

Resets:
- `rst_n` resets everything. `trst_n` resets the TAP.
- The data-path reset is registered from "TTC master reset or control soft reset".

## Departures from the published chip

What is this design's own, because the published description does not give it:
- the word formats;
- the TTC encoding;
- JTAG instruction codes, ID code and register layout;
- the CRC polynomial;
- the matching rule and window units;
- the round-robin order;
- the byte split and idle symbol of the serial link;
- the assignment of clock edges to sampling flip-flops.

Other points:
- The published block diagram does not mark the trigger FIFO as TMR-protected, while the
  text says all FIFO control logic is. Here all three kinds of FIFO have TMR pointers.
- The PLL, the LVDS input/output pads and the discriminator chip are not part of this RTL.
  Their signals are ports of `tdc_top`.
- The published diagram marks the slices' coarse counters with a "x2" that is not explained.
  Each slice has its own counter here.

## Capacity

Using the rates quoted for the detector upgrade:

| case | needed | available | fits |
|------|--------|-----------|------|
| Triggerless pair mode, 400 kHz per channel | 9.6 M words/s | 16 M words/s | yes |
| Triggerless edge mode, 400 kHz per channel | 19.2 M words/s | 16 M words/s | no: the channel FIFOs overflow |
| Cosmic-ray drift times up to 193 ns | window ≥ 193 ns | 250 ns default, up to 12.8 us | yes |
| Triggered mode at 1 MHz with 10 us latency | offset 10 us | offset up to 12.8 us | yes |
| Ring buffer for that latency | ~10 us of hits | ~40 us of hits at 400 kHz (average) | yes |
| Words per event at that rate | ~4.4 per event | ~16 per event | yes |

The triggered-mode buffer figures are averages. A burst of more than 16 hits on one channel
within the latency loses the oldest hits.

`tdc_top_rate_tb` runs every row except the cosmic-ray one on the full core, with Poisson-
distributed pulses on all 24 channels. A 100 ns dead time after each pulse stands in for the
discriminator. Each phase covers 85 us.

| case | simulated result |
|------|------------------|
| Pair mode | 791 hits, all delivered; no channel FIFO overflow |
| Edge mode | the link carried 16.00 M words/s while saturated; 107 of 1504 words were lost and the overflow flag was set |
| 1 MHz TTC triggers, 10 us offset | 74 triggers gave 74 correct events with 172 hits, about 2.3 per event; the trigger FIFO never overflowed |

## Source files

All modules import `tdc_pkg`, which holds the widths, the struct types of the registers, the
word-building functions and the CRC.

| file | contents |
|------|----------|
| `rtl/tdc_pkg.sv` | constants, `setup_t`, `control_t`, `status_t`, word formats, CRC-8 |
| `rtl/tmr_reg.sv`, `rtl/tmr_scrub_reg.sv` | the two TMR cells |
| `rtl/tdc_slice.sv` | four-phase sampling, fine code, coarse counter |
| `rtl/hit_builder.sv` | edge / pair word building |
| `rtl/ring_buffer.sv` | 16-word hit history and window scan |
| `rtl/sync_fifo.sv` | FIFO with plain memory and TMR pointers |
| `rtl/tdc_channel.sv` | two slices, hit builder, ring buffer, channel FIFO |
| `rtl/ttc_decoder.sv` | TTC command decoder (TMR) |
| `rtl/trigger_interface.sv` | trigger source select, time base, event id, window start |
| `rtl/event_builder.sv` | triggered-mode event framing |
| `rtl/channel_mux.sv` | triggerless round-robin arbiter |
| `rtl/encoder_8b10b.sv` | 8b/10b encoder |
| `rtl/serial_interface.sv` | two-line 8b/10b serialiser (TMR) |
| `rtl/jtag_tap.sv` | TAP controller and instruction register |
| `rtl/config_regs.sv` | setup / control / status registers, clock-domain crossing, CRC |
| `rtl/tdc_top.sv` | the core |

## Simulation

Every module has a self-checking testbench `tb/<module>_tb.sv`. It prints
`TB_RESULT checks=N failures=M` and stops, and a watchdog ends it if it hangs. With
Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
          rtl/tdc_pkg.sv tb/tdc_top_tb.sv --top-module tdc_top_tb -o sim
obj_dir/sim
```

Replace `tdc_top_tb` by any other testbench name. The testbenches use only `$urandom`, and
they reset or initialise everything they read, so they run on a two-state simulator.

**Unit testbenches.** Each compares the module with an independent model written in the
testbench:
- `tdc_slice_tb`: random edge times against `ceil((t-E)/LSB)`.
- `hit_builder_tb`: both modes, saturation, coincident edges.
- `ring_buffer_tb`: overwrite, window wrap-around, stalls.
- `sync_fifo_tb`: random traffic plus injected upsets in one register copy.
- `tmr_reg_tb`, `tmr_scrub_reg_tb`: upsets in each copy.
- `encoder_8b10b_tb`: reference code words and the run-length and disparity rules over
  random streams.
- `serial_interface_tb`: decodes the lines back to words.
- `jtag_tap_tb`, `config_regs_tb`: scans over a bit-banged TCK.
- `ttc_decoder_tb`, `trigger_interface_tb`, `channel_mux_tb`, `event_builder_tb`,
  `tdc_channel_tb`.

**`tdc_top_tb`.** This runs the full 24-channel core at its default sizes, only through its
pins. It decodes the serial lines itself, with comma alignment and 8b/10b decoding. It
checks every word against times computed from the pulses it drives. It goes through:
- JTAG ID code, setup write and CRC readback;
- BCR;
- triggerless pair and edge modes;
- a burst that fills the readout FIFO;
- a disabled channel;
- triggered mode with TTC triggers;
- ring-buffer overwrite;
- channel FIFO stalls;
- pin triggers;
- event count reset;
- master reset and recovery.

It counts how often each of these happened and fails if one never did. Building and running
it takes well under a minute.

**`tdc_top_rate_tb`.** This is the rate test described under Capacity. It also runs at full
size and takes a similar time.
