# VA140 readout logic for a scalable gas-detector readout card

Micro-pattern gas detectors (GEMs, Micromegas) have thousands of readout strips. A
scalable readout system splits the electronics into three kinds of boards: ASIC cards
next to the detector that amplify and shape the strip signals, an Adapter card that
digitises the ASIC outputs, and a Front-End Card (FEC) with an FPGA that controls both,
packs the samples into events and ships them over Gigabit Ethernet. Systems grow by
adding FECs to a crate and an Ethernet switch. Only the FPGA carries logic. The board
can be reprogrammed for whichever Adapter is plugged in.

This repository holds SystemVerilog for that FPGA logic in its VA140 configuration.
In that configuration one FEC serves 8 ASIC cards with 2 VA140 chips each. That makes
16 chips with 64 channels apiece, and 32 channels of each chip are bonded to strips,
so one FEC reads 512 detector channels. The Adapter has one dual 12-bit AD7356 ADC per
card. The design is written from a published description of a prototype system. The
description gives the board structure, the chip counts, the control signal names and
the readout timing, but not the FPGA firmware. Everything between those fixed points is
this design's own and is marked as such below.

## The readout of one event

The VA140 is a charge-sensitive preamplifier and shaper with no self-trigger and no
ADC of its own. Each channel's shaped pulse peaks 6.5 us after the charge arrives. To
read an event the FPGA must:

1. wait for the shaper peak after the trigger (6.5 us);
2. pull HOLDB low, so that every channel holds its peak level;
3. start the chip's output shift register with SHIFT_IN_B and clock it with CLKB,
   one channel per clock, at up to 5 MHz. The chip's single analog output then shows
   channel 0, 1, ... 63 in turn, and 64 channels take 12.8 us;
4. convert each of those 64 levels with the ADC;
5. release HOLDB and clear the shift register (DRESET).

`va140_sequencer` produces this sequence for all eight cards at once. With the
system clock taken as 160 MHz the numbers are:

| step | length (cycles) | time | set by |
|---|---|---|---|
| trigger to HOLDB low | 1040 (`PEAK_CYCLES`) | 6.5 us | shaper peaking time |
| HOLDB to first CLKB edge | 16 (`HOLD_SETUP`) | 100 ns | this design |
| readout, 64 CLKB periods | 64 x 32 (`CLKB_DIV`) = 2048 | 12.8 us | 5 MHz CLKB |
| last conversion finishes | 32 | 200 ns | this design |
| DRESET pulse | 8 (`DRESET_CYCLES`) | 50 ns | this design |

Each CLKB period starts with a falling CLKB edge, which moves the chip output to the
next channel. SHIFT_IN_B is low from HOLDB until the middle of the first period. The
ADC conversion for the period starts 24 cycles in (`SAMPLE_PHASE`), once the analog
output has had three quarters of a period to settle. The conversion then runs into the
next period. That is harmless because the ADC tracks its input only until CS falls.
Measured from the trigger pin, the dead time per event is 19.7 us. The chip's 5 kHz
counting-rate limit allows 200 us per event.

The active-low levels, the idle-high CLKB and the choice of the falling edge as the
active edge are readings of the signal names. The published description does not state
them. If a real VA140 clocks on the other edge, only the sequencer's `S_SHIFT` state
needs to change.

## Capturing the ADC frames

Each card's two chips go to the two lanes of one AD7356: lane A takes the first chip
and lane B the second. The converter has four FPGA pins: CS, SCLK, SDATA_A and SDATA_B.
`ad7356_rx` runs one conversion per `start` pulse:

- CS falls, and the ADC samples both inputs.
- SCLK (idle high) runs 14 periods at half the system clock (80 MHz).
- At each falling SCLK edge both lanes are shifted in. The receiver takes the bit
  present just before the edge, and the ADC then presents the next one.
- A frame is 2 leading zeros followed by 12 data bits, MSB first. Non-zero leading bits
  raise `frame_err`.

CS stays low for 28 system cycles, which leaves 4 cycles of quiet time in a 32-cycle
CLKB period. All eight receivers start together and finish together, so one `valid`
strobe stands for all 16 samples of a slot. An assertion in the top checks this.

The frame format and the clock edges come from general knowledge of this converter
family, not from the readout description. Check them against the converter's data
sheet before using the RTL on hardware.

## Event record

`event_builder` turns each readout into 1027 16-bit words:

| word | content |
|---|---|
| 0 | `0xEB90` (sync) |
| 1 | event number, 16 bits, counts accepted triggers from 0 |
| 2 + 16*s + k | `{k[3:0], sample[11:0]}` for channel slot s = 0..63, chip k = 0..15 |
| 1026 | `0x90E0`, bit 0 set if any ADC frame check failed in this event |

Chip k is lane A (k even) or lane B (k odd) of card k/2. The slot order is the order
in which the chip shifts its channels out. All 64 slots are kept, including the 32
unbonded channels of each chip, which read as pedestal. Nothing is suppressed: the
description leaves event selection to each experiment, and the builder is the place to
add it. A slot arrives every 32 cycles and is written out at one word per cycle, so the
builder is idle half of the time.

At 5 kHz this record is 16432 bit x 5000 = 82 Mbit/s. The prototype quotes "below
80 Mbit/s" for its own, unpublished format.

## Trigger admission and buffering

The buffer and the link run at different rates. The readout produces a 1027-word event
in 20 us, while Gigabit Ethernet drains it in roughly 30 us at the 530 Mbit/s the
prototype reached, and a closed connection may not drain it at all. The design
therefore does not push back on the readout. It decides at trigger time whether the
event can be stored.

- `trigger_ctrl` accepts a trigger (external pin edge or software command) only if
  three conditions hold: the run is enabled, the sequencer and builder are idle, and
  the buffer has 1027 free words.
- All other triggers that arrive while running are counted as rejected.
- An accepted event is therefore always written in full. The builder needs no
  back-pressure, and the buffer cannot overflow. Its `overflow` flag and an assertion
  in the top watch for the impossible case.

`event_buffer` is a 8192 x 16 first-in first-out memory, which holds 7 whole events.
On the real card the events go to an external DDR3 chip. Here the same store-and-forward
function uses on-chip block RAM, and the DDR3 device and its controller are not
modelled. A deeper buffer only needs `BUF_DEPTH` raised.

## Into the TCP processor

The Ethernet side is the SiTCP hardware TCP/IP core, which talks GMII to an 88E1111
PHY. Both are bought in and lie outside this RTL. The top module brings SiTCP's user
ports out as its own ports:

- **TCP send port.** `tcp_tx_adapter` reads buffer words and writes them as two bytes,
  high byte first, on `tcp_tx_data`/`tcp_tx_wr`. It writes only in cycles where
  `tcp_open_ack` was high and `tcp_tx_full` low at the issuing edge. It fetches the
  next word while the last byte of the current word goes out, so without back-pressure
  it writes one byte every cycle (1280 Mbit/s). That is more than the link can carry.
- **Register access bus (RBCP).** `slow_control` answers each one-cycle `rbcp_we` or
  `rbcp_re` with a one-cycle `rbcp_ack` in the next cycle.

| address | name | access | bits |
|---|---|---|---|
| 0x00 | CTRL | r/w | [0] run enable, [1] external trigger enable |
| 0x01 | CMD | w | write 1: [0] software trigger, [1] clear counters |
| 0x02 | TEST_ON | r/w | VA140 TEST_ON level for cards 0..7 |
| 0x03 | STATUS | r | [0] busy, [1] no room for an event, [2] buffer empty, [3] overflow |
| 0x04/0x05 | ACC | r | accepted triggers, low/high byte |
| 0x06/0x07 | REJ | r | rejected triggers, low/high byte |
| 0x08 | ID | r | 0xA1 |

Addresses above 0xFF are acknowledged, read as zero and ignore writes. TEST_ON switches
a card's chips to their calibration input. Charge is then injected through the on-chip
capacitor from an external pulser.

## Pins

The top has 72 single-ended ASIC/ADC pins. That is exactly the count the board's
connector budget lists for the VA140 Adapter:

- 8 x 5 VA140 lines: `va_holdb`, `va_clkb`, `va_shift_in_b`, `va_dreset`, `va_test_on`;
- 8 x 4 ADC lines: `adc_cs_n`, `adc_sclk`, `adc_sdata_a`, `adc_sdata_b`.

The remaining ports are the following:

- `clk` and `rst_n` (asynchronous, active low);
- `ext_trig_in`;
- the SiTCP ports above;
- `busy` and `buf_overflow`.

The five VA140 control lines carry the same waveform on every card except TEST_ON. They
are separate pins because each card has its own cable.

## Modules

| file | role |
|---|---|
| `rtl/fec_pkg.sv` | event format constants, register map |
| `rtl/va140_sequencer.sv` | hold and serial readout of the VA140 chips |
| `rtl/ad7356_rx.sv` | one dual-ADC serial receiver |
| `rtl/trigger_ctrl.sv` | trigger sources, admission rule, counters |
| `rtl/event_builder.sv` | event record formatting |
| `rtl/event_buffer.sv` | event FIFO with room-for-one-event flag |
| `rtl/tcp_tx_adapter.sv` | words to SiTCP byte stream |
| `rtl/slow_control.sv` | RBCP register file |
| `rtl/fec_va140_top.sv` | wiring of the above |

Parameters of the top, with their defaults:

| parameter | default | meaning |
|---|---|---|
| `N_CARDS` | 8 | ASIC cards (and ADCs) |
| `CHIPS_PER_CARD` | 2 | fixed by the dual ADC |
| `N_CH` | 64 | readout slots per chip |
| `ADC_BITS` | 12 | ADC resolution |
| `CLKB_DIV` | 32 | system clocks per CLKB period |
| `PEAK_CYCLES` | 1040 | trigger to HOLDB |
| `SCLK_HALF` | 1 | system clocks per SCLK half period |
| `BUF_DEPTH` | 8192 | buffer words |

For another system clock, scale `CLKB_DIV` and `PEAK_CYCLES`. `SCLK_HALF` and the
sequencer's `SAMPLE_PHASE` must leave room for a 28 x `SCLK_HALF`-cycle ADC frame
inside one CLKB period.

## What is taken from the description and what is not

Taken from the published description of the prototype:

- the board structure;
- 8 cards x 2 VA140 chips x 64 channels, 32 of them bonded;
- one 12-bit dual AD7356 per card and the 72-pin budget;
- the VA140 and ADC signal names;
- 6.5 us to hold, CLKB at 5 MHz and 64 channels in 12.8 us;
- the data path: formatting, then a buffer, then the SiTCP core over Gigabit Ethernet;
- control of the cards over the same link.

This design's own choices:

- the 160 MHz clock;
- the signal polarities and clock edges;
- the ADC frame format;
- the trigger sources and admission rule;
- the event record;
- the register map;
- the buffer size.

Departures and gaps:

- **Buffer.** The buffer is on-chip RAM, not the board's DDR3.
- **Data rate.** The event record is slightly larger than the quoted data rate implies
  (82 versus under 80 Mbit/s at 5 kHz).
- **CLKB rate.** CLKB runs at the 5 MHz limit. The description calls its CLKB "less than
  5 MHz" and the 12.8 us readout a minimum.
- **Other chips.** The description also covers an AGET-based Adapter (4 cards, 256
  channels) and mentions an APV25 one. Their FPGA logic is not included, because only
  their pin names are given.
- **Bought-in parts.** SiTCP, the PHY and the analog parts are outside the RTL.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The benches use behavioural models of the bought-in
parts. `tb/va140_model.sv` holds, shifts and clears channel levels as the readout logic
sees them, and also checks the CLKB count per hold. `tb/ad7356_model.sv` produces the
serial frames. `tb/tb_fec_pkg.sv` defines the injected channel levels:

- bonded channels carry a pattern that depends on the event;
- unbonded channels carry a per-chip pedestal;
- with TEST_ON, channel 0 carries a calibration level.

| testbench | what it shows |
|---|---|
| `tb_va140_sequencer` | 1040-cycle hold delay, 64 CLKB periods of 32 cycles, 2048-cycle readout, SHIFT_IN_B, DRESET, TEST_ON, trigger ignored while busy |
| `tb_ad7356_rx` | random codes on both lanes, 28-cycle CS, 14 SCLKs, frame error |
| `tb_trigger_ctrl` | accept/reject and counters against a reference model under random conditions |
| `tb_event_builder` | every word of three events at the readout pace, error flag |
| `tb_event_buffer` | full-depth fill, room threshold, refused write, random traffic |
| `tb_tcp_tx_adapter` | byte order, full/closed rule, one byte per cycle |
| `tb_slow_control` | every register, command pulses, out-of-range addresses |
| `tb_fec_va140_top` | 14 events end to end at default size, checked byte by byte (see below) |
| `tb_workload_va140_rate` | 12 triggers at 5 kHz into a link throttled to about 530 Mbit/s, all accepted; then 40 triggers at about 48 kHz, some refused, every accepted event intact |

`tb_fec_va140_top` also makes each mechanism occur at least once:

- external and software triggers;
- rejection while busy and rejection for lack of room;
- TEST_ON and an ADC frame error;
- TCP back-pressure and a closed connection;
- a disabled trigger input;
- the counters read back over RBCP.

All benches run in well under a second. To run one with Verilator 5, from the
repository root:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_fec_va140_top \
        -y rtl -y tb +libext+.sv -Irtl rtl/fec_pkg.sv tb/tb_fec_pkg.sv tb/tb_fec_va140_top.sv
    obj_dir/Vtb_fec_va140_top

Unit benches need only `rtl/fec_pkg.sv` and their own file on the command line. The
top-level benches also need `tb/tb_fec_pkg.sv`. The benches use `$urandom`, so they run
on any simulator without a constraint solver. Lint warnings that remain are unused
package constants and signals, and reset nets that are also used in assertion
`disable iff` clauses.
