# A VME board FPGA for EPICS data acquisition and control

A VME board in an accelerator control system is mostly glue. A controller
running EPICS has to reach an assortment of converters, interlocks,
timing signals and memories. The slow, hard-wired TTL bus interface of the
old boards can be replaced by one FPGA that holds two things:

* a generic **VME slave interface**, written once and reused on every board;
* the board's **application logic** behind that interface. This logic is a
  handful of 8-bit control and status registers plus the state machines,
  counters and arithmetic that the application needs.

This RTL follows a family of such boards used at an electron accelerator.
It rebuilds the common interface and the six applications as
synthesizable SystemVerilog:

| application | what the FPGA does |
|---|---|
| SCAM (System Catch All Module) | timing pulses that gate the three lasers of the polarised electron source, one per experimental hall |
| injector high-voltage controller | on/off, slow ramp, interlocks, over-current trip and bleed-off lock-out for a 100 kV gun supply, plus four HV relays |
| 30 Hz board | node on a fibre-optic token ring that carries addressed and broadcast timing messages; raises a VME interrupt |
| Dual DSP board | arbitration of two DSPs onto 128 KB of dual-port memory, which VME also sees |
| MPS (machine protection) comparator | beam loss = injector current minus the sum of the end-station currents, per-location limits, integrated loss, shutdown, an 8 MB SDRAM history buffer, loss DAC, fibre link to the control room |
| PLL module | I = A·sin φ and Q = A·cos φ from table look-ups in FLASH, sent to two 14-bit DACs; amplitude and phase come from VME or from front-panel encoders; eight-channel read-back ADC |

The original boards each had their own FPGA and clock. Here all six
applications sit in one top-level module, `vme_fpga_top`, behind one VME
interface and one address map. This is possible because device density
has grown far enough to hold several such designs in one part. Each
application is also a module of its own and can be used alone.

## The VME slave (`vme_slave`)

The slave is the part that every board shares, and the one whose timing
matters most. VME is an asynchronous bus. The master drives the address
strobe AS\*, then one or both data strobes DS1\*/DS0\*. The slave holds
DTACK\* low until the master releases the strobes. The FPGA has its own
clock, so all strobes go through two-flop synchronisers. A state machine
then follows the bus:

```
IDLE --AS* low, AM and address hit--> WAIT_DS --DS* low--> LATCH --> REQ --lb_ack--> ACK
  ^  \--AS* low, no hit--> WAIT_AS_HI --AS* high--> IDLE             |
  |                                                                 DS* high
  +---- AS* high, or AS* went high during ACK (pipelined) <----------+--> WAIT_DS (AS* still low)
```

* **Decode.** The address modifier selects the space. A16 uses 0x29
  and 0x2D. A24 uses 0x39/0x3A/0x3D/0x3E for single cycles and 0x3B/0x3F
  for block transfers. The address is compared with the jumper base
  under a mask: an A16 window is 256 bytes and an A24 window is 1 MB. The
  slave does not answer a cycle that is not for it, so no DTACK\* comes
  back.
* **Data.** WRITE\* and the data bus are taken one clock after the data
  strobe has been seen, so that both strobes have settled. DS1\* alone
  is the even byte (D15..D8), DS0\* alone is the odd byte (D7..D0), and
  both together make a D16 word. Each data strobe becomes one request on
  the local bus (`lbus_req_t`: word address, byte enables, write data,
  space). A local resource answers with `lb_ack` whenever it is ready.
* **Acknowledge.** DTACK\* and the outward data drivers stay on until
  both strobes are seen high.
* **Cycles while AS\* stays low.** With a block-transfer modifier, the
  word address counts up after each data strobe. With any other modifier
  the next strobe goes to the same address. This is the
  read-modify-write cycle: a read followed by a write inside one AS\*.
* **Address pipelining.** A master may end the address phase and start
  the next one (AS\* high, new address, AS\* low) while it still holds the
  previous data strobe. The slave notes that AS\* went high during the
  acknowledge. Once the strobes are released it decodes the new address
  instead of continuing the old cycle. AS\* must be seen high for at least
  one clock.

Timing: DTACK\* falls 4 clocks plus the local latency after the data
strobe reaches the pins, and rises 2-3 clocks after the strobes are
released. Two assertions state the bus rules: DTACK\* is never driven
from idle, and the data bus is driven only while a read is acknowledged.

## Vectored interrupts (`vme_irq`)

Event sources (in the top: a received 30 Hz message and the start of an
MPS shutdown) set pending bits. While an enabled source is pending, the
interrupter pulls IRQ*n*\* low at a programmed level from 1 to 7. The
handler's interrupt-acknowledge cycle carries the level on A3..A1 and
comes down the IACKIN\*/IACKOUT\* daisy chain. If the level matches and a
source is pending, the board answers with a status/ID and clears that
source's pending bit (release on acknowledge):

* with only DS0\* low it returns the low byte (D08);
* with both strobes low it returns the full 16 bits (D16).

The status/ID is the programmed vector with its three low bits replaced by
the number of the lowest pending source. One handler can therefore tell
the sources apart. An acknowledge that is not for this board is passed on
through IACKOUT\* until AS\* rises.

## Address map and 8-bit registers

The application blocks keep their state in 8-bit registers on a simple
register bus (`reg_req_t`). A write takes effect at a clock edge. Read
data are combinational, and `rd` marks the clock on which a read is taken,
for registers that clear when read. `reg_bridge` splits a D16 access into
two register accesses: offset 2n (D15..D8) first, then 2n+1 (D7..D0).

| VME space | addresses (board base set by jumpers) | target |
|---|---|---|
| A16 | base_a16 = A15..A8, offsets 0x00-0xFF | register page |
| A24 | base_a24 = A23..A20, 0x00000-0x1FFFF | dual-port memory, 128 KB |
| A24 | 0x20000-0x3FFFF | register page (repeats every 256 bytes) |
| A24 | 0x80000-0xFFFFF | SDRAM window, 512 KB, page chosen by the buffer's PAGE register |
| A24 | anything else in the 1 MB window | acknowledged, reads 0 |

The register page:

| offset | block | registers |
|---|---|---|
| 0x00-0x06 | SCAM | CTRL (laser enables), DELAY0-2, WIDTH0-2 |
| 0x08-0x0F | interrupter, board status | level, source enables (bit0 30 Hz, bit1 MPS), status/ID high and low, pending; read-only: control-room samples skipped, phase and amplitude encoder errors |
| 0x10-0x18 | HV controller | CTRL, STATUS, SET lo/hi, RAMP, ILIM, VMON lo/hi, IMON |
| 0x20-0x2B | 30 Hz node | CTRL, STATUS, MYADDR, RX addr/d0/d1, TX addr/d0/d1, TXGO, RXCNT, ERRCNT |
| 0x30-0x36 | history buffer | CTRL, STATUS, PTR (3 bytes), OVERFLOW, PAGE |
| 0x40-0x5F | MPS comparator | CTRL, STATUS, CH_MASK, LIM_TRIP, LEAK, INTEG_LIMIT (3), loss (2), integrated loss (3), LIMIT[0..7] at 0x50 |
| 0x60-0x6D | I/Q generator | CTRL, phase, amplitude, I and Q DAC words, inputs in use, update count |
| 0x70-0x81 | read-back ADC | channel n at 2n (high) and 2n+1 (low), scan count, timeouts |

Each module's opening comment gives the bit fields. The SCAM has seven
registers, the HV controller nine and the 30 Hz node twelve, the same
counts as the original boards.

## SCAM laser timing (`scam_pulse`)

A rising edge on the trigger input restarts a common tick counter, which
stops at its maximum. Laser channel *n* is high while
DELAY[n] ≤ count < DELAY[n] + WIDTH[n], if its channel is enabled. With
DELAY = d, the pulse starts 3 + d·TICK_DIV clocks after the trigger edge.

## Injector high voltage (`hv_ctrl`, `vf_counter`)

* **DACs and read-backs.** One 16-bit DAC sets the supply voltage and one
  sets its current limit. Two voltage-to-frequency converters read back
  the output voltage and current. `vf_counter` counts each converter's
  pulses over a 10 ms gate.
* **Ramp.** When HV_ON is set, the voltage DAC moves toward the set point
  by RAMP codes every RAMP_DIV clocks.
* **Trips.** Any interlock input going low trips the supply: it is
  disabled and the DAC goes to zero. So does a current count above
  ILIM·256. A trip stays latched until TRIP_RESET.
* **Bleed-off lock-out.** Every turn-off or trip starts a 5 s bleed-off
  timer. The supply cannot be turned on again until the timer has run out
  and the voltage read-back is below BLED_LEVEL. This keeps a charged
  supply from being re-energised, which causes arcing.
* **Relays.** The four relays change only while the supply is off and
  bled.

## 30 Hz timing ring (`sync30_node`, `serial_tx`, `serial_rx`)

The boards form a fibre-optic ring. Bytes are sent as start bit, 8 data
bits LSB first and stop bit, at 20 clocks per bit. A message is three
bytes: address, data 0, data 1. A gap of more than 30 bit times throws
away a partial message.

Each board has a jumper address. A node accepts a message addressed to
itself or to the broadcast address 0. On accepting one it:

* stores the message;
* pulses `sync_pulse`, the timing output;
* requests a VME interrupt, if that is enabled.

One node is the ring master. It sends messages from its TX registers and
does not pass on what comes round, so each message makes exactly one
trip. Every other node repeats each byte with one byte of buffering.
Framing errors and overruns are counted.

## Dual DSP memory (`dpram`, `mem_arbiter`)

The dual-port memory is 64 K words of 16 bits (128 KB) with byte writes.

* Port A is VME, through the local bus.
* Port B is shared by the two DSPs through `mem_arbiter`. This is a
  two-master round-robin arbiter with a request/acknowledge handshake and
  one access in flight.

When both DSPs wait, they alternate, and with a one-clock memory each
access takes 3 clocks. The same arbiter shares the SDRAM port between
the history buffer and VME.

## Machine protection comparator (`mps_comparator`, `circ_buffer`, `mps_link`)

Eight current readings arrive together from the DSP boards (`p2_cur`,
strobed by `p2_valid`). Channel 0 is the injector and channels 1-7 are
end stations. Two clocks after each set:

* **limits:** every channel is compared with its own limit;
* **instantaneous loss** = injector − Σ(end stations selected by
  CH_MASK), saturated to 16 bits signed;
* **integrated loss:** `INTEG += loss − (INTEG >> LEAK)`, never below 0.
  A steady loss L settles near L·2^LEAK, while a burst builds up at once.
  INTEG above INTEG_LIMIT trips.

A trip latches `shutdown`, which removes `beam_permit`, until CLEAR is
written. The loss also drives a 16-bit offset-binary DAC.

Every loss sample goes to two places:

* **The history buffer.** `circ_buffer` writes a four-word record into an
  8 MB circular buffer in SDRAM: {status, sequence}, loss, INTEG[23:16],
  INTEG[15:0]. Its write pointer is readable over VME; after a wrap it
  marks the oldest record, the start of the history. With FREEZE set,
  writing stops at the first record taken during a shutdown, so the
  history leading up to the shutdown can be read back through the SDRAM
  window; REARM restarts it. A sample that arrives while a record is
  still being written is dropped and counted.
* **The control room link.** `mps_link` sends the sample over fibre as the
  frame 0xA5, loss high byte, loss low byte, status. Samples that arrive
  while a frame is in flight are counted as skipped.

## PLL set points (`iq_calc`, `quad_decoder`, `adc_scan`)

The operator sets an amplitude code and a phase code over VME, or with
two front-panel quadrature encoders; CTRL.SRC chooses which.
`quad_decoder` does x4 decoding and counts illegal double steps.

`iq_calc` loops without stopping. On each pass it:

1. latches the inputs;
2. reads three words from FLASH, each read taking FLASH_WAIT+1 clocks
   with a steady address:
   * region 0: sin(2πk/1024)·32767;
   * region 1: cos(2πk/1024)·32767;
   * region 2: the calibrated amplitude for code k;
3. multiplies: I16 = (A·sin) >>> 16 and Q16 = (A·cos) >>> 16.

Each DAC takes bits 15..2 of its result with the sign bit inverted: a
14-bit offset-binary code. One pass takes 5 + 3·FLASH_WAIT clocks.

`adc_scan` steps through the eight ADC channels on its own. For each
channel it:

1. selects the channel;
2. waits SETTLE clocks;
3. starts a conversion;
4. waits for busy to go high and then low;
5. stores the 12-bit result.

Reading a channel's high byte latches its low byte, so one D16 read
returns a reading whose two halves belong together.

## Clocks and rates

All blocks run on the one `clk` of the top. The parameter defaults are
sized for the clock of the original board of each application:

| block | clock assumed by the defaults | rate it gives |
|---|---|---|
| scam_pulse | 16 MHz | 1 tick = 1 clock |
| hv_ctrl, vf_counter | 10 MHz | 10 kHz ramp steps, 10 ms gate, 5 s bleed-off |
| sync30_node | 20 MHz | 1 Mbit/s ring |
| dpram, mem_arbiter | 25 MHz | - |
| mps_*, circ_buffer | 40 MHz | 1 Mbit/s control-room link |
| iq_calc, adc_scan | 10 MHz | - |

A board built from `vme_fpga_top` at one clock gets these rates scaled by
its clock. Set the parameters in the top to match the clock you use.

## What is outside the FPGA, and where this RTL departs from the original boards

These parts are outside the FPGA. The top's ports are their logic-level
connections:

* the DSPs;
* the SDRAM and its controller (`sd_*`, a word request/acknowledge port);
* the FLASH;
* the DACs, the ADC and the V/F converters;
* fibre transceivers and optical encoders;
* the HV supply and its relays;
* the VCXO and the RF circuit of the PLL;
* the configuration EEPROM and JTAG.

Departures and own choices to be aware of:

* **One FPGA, one clock.** The six applications were six boards, each
  with its own clock (16, 10, 20, 25, 40 and 10 MHz).
* **A16 decoding.** Two of the original boards decoded A16 in a small
  separate PLD. Here it is done in `vme_slave`.
* **Bus width.** The SCAM and HV boards had 8-bit VME interfaces. Here
  the slave is 16-bit, and a D08 access reaches a single register.
* **Loss integration.** The comparator's loss integration was described
  only as adaptive. The leaky integrator with a programmable leak is a
  stand-in. This is the least faithful part of the design.
* **P2 backplane.** The custom link from the DSP boards to the comparator
  has no documented format. The top takes the eight currents as parallel
  words with a strobe.
* **Own formats.** These are not documented for the originals and were
  chosen here:
  * serial framing, bit rates and the 30 Hz message format;
  * the master/repeater ring scheme;
  * the control-room frame;
  * the history record;
  * the FLASH table layout;
  * the ADC handshake;
  * all register layouts except the register counts.
* **Current-limit DAC.** ILIM is an 8-bit register, so the low byte of the
  16-bit current-limit DAC is always 0.
* **Front-panel I/O.** Only one trigger and three laser outputs of the
  SCAM's front panel are modelled. The two optical outputs of the HV
  board are not modelled either.
* **No arithmetic for the DSP boards.** Nothing in the FPGA computes the
  currents; that is the DSPs' work.

## Simulating

Every module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`
(`tb_mem_arbiter` for the arbiter). Each one prints
`TB_RESULT checks=N failures=M` and stops. Most block testbenches override
timing parameters, such as bit times, gate lengths and the bleed timer,
to stay short. The tests also check this design's own latencies in
clock cycles: DTACK\* latency, pulse delay, serial frame length, the I/Q
update period and the arbiter's access time.

`tb_vme_fpga_top` runs the whole design at its default sizes: 8 MB SDRAM,
128 KB dual-port memory, real bleed-off and gate times. It does this
from the VME side, as an EPICS I/O controller would, and uses
behavioural models:

* `vme_master`, an interface with tasks for single, block,
  read-modify-write, pipelined and interrupt-acknowledge cycles;
* `sdram_model`;
* `flash_model`, whose tables are computed at start-up.

The test counts 25 mechanisms and fails if any of them never happened.
They are: A16/A24, D08/D16, block transfer, RMW, pipelining, unmapped
access, DSP contention, SCAM pulse, HV ramp and trip, ring broadcast,
D08 and D16 interrupt acknowledge, loss DAC, SDRAM history read-back,
buffer overflow, control-room link skip, limit trip, buffer freeze,
control-room frame, I/Q from VME and from the encoder, and ADC scan.

With plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/vme_pkg.sv tb/tb_vme_fpga_top.sv --top-module tb_vme_fpga_top -o sim
./obj_dir/sim
```

Replace `tb_vme_fpga_top` with any other testbench name. Verilator has
two states and no X values, so every register that is read has a reset.

## Files

* `rtl/vme_pkg.sv`: AM codes, `lbus_req_t`, `reg_req_t`
* `rtl/vme_slave.sv`, `rtl/vme_irq.sv`, `rtl/reg_bridge.sv`: the VME interface
* `rtl/scam_pulse.sv`, `rtl/hv_ctrl.sv`, `rtl/vf_counter.sv`,
  `rtl/sync30_node.sv`, `rtl/serial_tx.sv`, `rtl/serial_rx.sv`,
  `rtl/mem_arbiter.sv`, `rtl/dpram.sv`, `rtl/mps_comparator.sv`,
  `rtl/circ_buffer.sv`, `rtl/mps_link.sv`, `rtl/iq_calc.sv`,
  `rtl/quad_decoder.sv`, `rtl/adc_scan.sv`: the applications
* `rtl/vme_fpga_top.sv`: everything together
* `tb/`: one testbench per module, plus `vme_master.sv`,
  `sdram_model.sv` and `flash_model.sv`
