# Acquisition and control firmware for a neutron EDM experiment

A neutron electric-dipole-moment measurement repeats, thousands of times, the
same few-minute cycle: fill a chamber with ultra-cold neutrons and polarised
mercury-199, tip both spin populations by pi/2 with short rotating magnetic
fields (about 8 Hz for mercury, about 30 Hz for neutrons), let them precess for
a couple of hundred seconds while the mercury precession is read optically,
apply a second neutron pi/2 pulse, and count the neutrons of each spin state.
Every one of these actions has to start and stop on a fixed time grid, the
excitation generators must start with a known phase, and the data must come
back in step with the sequence.

This RTL is the FPGA firmware of a single board that does all of that. Its
heart is a **micro-timer**: a table of up to 16 steps, each with a duration in
microseconds and a 32-bit action mask, played out on the 10 MHz rubidium
atomic clock. Each bit of the mask directly drives one action: a TTL valve
output, the load of a new frequency/phase into a pair of external DDS chips,
the closing of an output switch, the start of an amplitude ramp, the ADC, or
the gate of a bank of neutron counters. Everything else in the firmware serves
those actions.

```
                 +-----------------------------------------------------------+
 USB micro-  <-->| usb_interface  (register bus, address map)                |
 controller      +---+-----------+-------------+-------------+-----------+---+
                     | table RAM | Hg DDS RAM  | Neu DDS RAM | scaler    | FIFO/status
                 +---v-------+ +-v-----------+ +-v-----------+ +v------+ +v-------------+
 run ----------->| utimer    | |dds_interface| |dds_interface| |scaler | |adc_interface |
                 | 512x32 RAM| | 1k x16 RAM  | | 1k x16 RAM  | |2 x 12 | | FIFO 1k x 16 |
                 | 2-state FSM| | DDS0, DDS1 | | DDS2, DDS3  | |cnt32  | | AD7685 FSM   |
                 +-----+-----+ +------^------+ +------^------+ +---^---+ +------^-------+
      action mask -----+--HgExcUpd----+  NeuExcUpd----+  gates-----+  enAdc----+
                       +--> TTL[7:0], enHgExc, enNeuExc, OskHg, OskNeu,
                            enSpinFlipper[3:0], stage[3:0]  (to pins)
 10 MHz --> freq_divider --> clk_500k (reference clock of the four AD9852)
```

All logic runs on the atomic clock itself (`clk_10m`); only the neutron
counters are clocked by their own input pulses.

## The micro-timer (`utimer`)

### Table format

The table sits in a 512 x 32 dual-port RAM. Only the first 32 words are used:

| word | content |
|------|---------|
| 2k   | duration of step k, in microseconds, 1 .. 2^32-1 (up to 71 minutes) |
| 2k+1 | action mask of step k |

A duration of 0 is not a legal step length and is used as an end-of-table
marker, so a cycle can have fewer than 16 steps. Without a marker the table
ends after step 15.

The action mask bits (the list of actions is that of the published design,
the bit order is this design's own):

| bits  | action | drives |
|-------|--------|--------|
| 7:0   | TTLout[7:0] | buffered TTL outputs (UCN valve, Hg valve, ...) |
| 8     | HgExcUpd | start of a parameter load of the mercury DDS pair |
| 9     | NeuExcUpd | same, neutron DDS pair |
| 10    | enHgExc | closes the output switches of the mercury pair |
| 11    | enNeuExc | closes the output switches of the neutron pair |
| 12    | OskHg | OSK pin of the mercury pair: high = ramp up, low = ramp down |
| 13    | OskNeu | OSK pin of the neutron pair |
| 14    | enAdc | PMT acquisition on |
| 18:15 | enSpinFlipper[3:0] | output switches of the four 19 kHz spin-flipper generators |
| 19    | enSpinUpCnt | gate of scaler bank 0 |
| 20    | enSpinDnCnt | gate of scaler bank 1 |
| 31:21 | unused | |

The masks are level signals: an output is high for exactly the steps whose
mask sets its bit. The two update bits are edge-triggered at the DDS interface,
so holding them for several steps causes a single load.

### Execution and timing

The FSM has two states, IDLE and RUN. A rising edge of `run` (register bit
from the host) starts step 0; dropping `run` aborts immediately, with all
actions cleared. Keeping `run` high after the table has ended does not restart
it: the host arms every cycle explicitly, typically after loading the next
excitation frequencies.

```
clk        _|‾|_|‾|_|‾|_|‾|_|‾|_ ... _|‾|_|‾|_|‾|_
run        __|‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾ ... ‾‾‾‾‾‾‾‾‾‾‾‾
state      IDLE  | RUN (fetch step 0)| step 0 ...
actions    0 ............................| mask0 for d0*10 clocks | mask1 ...
```

* One microsecond is `TICKS_PER_US` = 10 clocks. Step k lasts exactly
  d_k x 10 clocks; there is no gap or overlap between steps.
* The first step starts 3 clocks after the clock edge that sees `run` high
  (one more if counted from the host's register write).
* The two words of the next step are read during the last three clocks of the
  current one. The read pointer is `{step, word}`; its four upper bits are the
  `stage` output, updated when a step begins. `stage` goes to the board pins
  (for synchronising other crates) and to the status register.

Because the step grid is built from the atomic clock and the outputs are
registered, every action edge is placed with 100 ns granularity and no
jitter, well below the 1 ms the experiment needs on its 2 s pulses.

### Programming an excitation pulse

A pi/2 pulse uses three consecutive steps and the DDS pair's own amplitude
ramp (Output Shaped Keying):

| step | bits set | what happens |
|------|----------|--------------|
| a | HgExcUpd | both DDS of the pair receive frequency and phase words, then update together |
| b | enHgExc, OskHg | switches close, amplitude ramps up from zero |
| c | enHgExc | OSK low: amplitude ramps down; switches stay closed |
| d | (neither) | switches open at zero amplitude |

Step a must outlast the parameter load and the update pulse (16.2 us +
4 us, so about 21 us or more). Because
the load has a constant latency, the time from the update to the switch
closing is fixed, which fixes the start phase of the two sine waves. The ramp
time itself is programmed in the DDS chips, not here.

## DDS pair interface (`dds_interface`)

Two instances, one for the mercury pair (DDS0/DDS1, `upd01`), one for the
neutron pair (DDS2/DDS3, `upd23`). The four chips are AD9852 48-bit DDS
clocked at 500 kHz.

* Each instance has a 1k x 16 RAM written by the host. Word i holds register
  i of both chips (i = 0..39, the full AD9852 register map): the low byte goes
  to the first chip, the high byte to the second. Putting the same frequency
  word and two phase offsets 90 degrees apart gives the sine/cosine pair.
* A load starts on the rising edge of `usb_upd OR exc_upd` (host request or
  micro-timer bit). Requests during a load are ignored.
* Both chips are written in parallel on their 8-bit parallel ports, four
  clocks per register (RAM read, address/data out, `wr_n` low, `wr_n` high,
  latched on the rising edge). One clock after the 40th write, the common
  update line is raised for 40 clocks (two DDS clock periods).
* Latency from the request edge to `upd` rising: 4 x 40 + 1 = 161 clocks,
  always. From the start of a micro-timer step with the update bit, it is 162
  clocks (16.2 us).

## PMT acquisition (`adc_interface`)

The AC part of the photomultiplier signal (after analog band-pass filtering
around 8 Hz) is digitised by an AD7685 16-bit ADC.

* While `enAdc` is set, a conversion starts every `sampling_period` clocks,
  the first one on the first clock of the enabling step. The period register
  is 24 bits wide in 100 ns units: 10 us (100) to 1677 ms (2^24-1).
* A conversion holds CNV high for 25 clocks (2.5 us, above the chip's 2.2 us
  maximum conversion time), then reads 16 bits, MSB first, with a 5 MHz SCK:
  58 clocks per sample in total.
* Samples go into a 1k x 16 FIFO. The host must read it while acquiring (at
  100 Hz it holds 10 s of data, at 1 kHz 1 s). A sample that finds the FIFO
  full is dropped and sets a sticky overflow flag.

## Neutron scaler (`scaler`, `cnt32`)

Twelve detector inputs each feed two 32-bit counters: bank 0 counts while
`enSpinUpCnt` is set, bank 1 while `enSpinDnCnt` is set (after the spin
flipper has been switched on). Each counter is clocked by its input pulses,
not by the 10 MHz clock, so it follows rates of 100 MHz and more, limited only
by the FPGA's flip-flop timing. The gate signals come straight from the
micro-timer; counts are meant to be read once the gates are closed. A host
command clears all 24 counters.

## Frequency divider (`freq_divider`)

Divides the 10 MHz clock by 20 for the AD9852 reference: a 0..9 counter whose
wrap toggles the output, giving 500 kHz with a 50% duty cycle. The slow DDS
clock is what gives the 48-bit DDS their 1.77 nHz tuning step and allows
amplitude ramps up to about 2 s.

## Host interface (`usb_interface`) and register map

The USB micro-controller sees a synchronous word bus on the 10 MHz clock:
16-bit word address, 32-bit data, one-clock `bus_we`/`bus_re` strobes, read
data one clock after the strobe with `bus_rvalid`.

| address | access | content |
|---------|--------|---------|
| 0x0000 | W | bit 0 run (level); bits 1..4 one-clock pulses: Hg DDS update, neutron DDS update, scaler clear, ADC overflow clear. Read: run |
| 0x0001 | R/W | ADC sampling period, 100 ns units, 24 bits (reset value 100) |
| 0x0002 | R | [3:0] stage, [4] timer running, [5] Hg load busy, [6] neutron load busy, [7] ADC overflow, [8] FIFO empty, [26:16] FIFO word count |
| 0x0003 | R | pops one ADC sample (bits 15:0); reads 0 when empty |
| 0x0200-0x03FF | R/W | micro-timer RAM |
| 0x0400-0x07FF | R/W | mercury DDS pair RAM |
| 0x0800-0x0BFF | R/W | neutron DDS pair RAM |
| 0x1000-0x100B | R | scaler bank 0 (spin up), channels 0..11 |
| 0x1010-0x101B | R | scaler bank 1 (spin down), channels 0..11 |

The address map and bus protocol are this design's own. The micro-controller
side (its firmware, its USB protocol, and how it packs this bus onto its
I/O ports) is not part of this RTL.

## Size

After generic synthesis the whole firmware has about 1,130 flip-flops and four
memories: the 512 x 32 micro-timer table, two 1k x 16 DDS memories and the
1k x 16 ADC FIFO, each one 18-kbit block RAM of a Spartan-3 class FPGA. Two
thirds of the flip-flops are the 24 scaler counters.

## What follows the published design and what does not

Taken from the published description: the seven firmware blocks and their
connections; 16 steps with 32-bit durations in 1 us units and 32-bit masks in
a 512 x 32 RAM; the two-state FSM started by `run`; the stage number from the
read-pointer MSBs; the list of actions; the DDS pair memories of 1k x 16 with
up to 40 bytes per chip, two bytes per word; the update on either the
micro-timer or the host request; simultaneous update of a pair with constant
latency; the divide-by-20 with a 0..9 counter; two banks of twelve gated 32-bit
counters; the ADC FIFO of 1k x 16; the 100 ns sampling step with its 10 us to
1677 ms range.

Choices of this design, where the description gives no detail: the bit
positions in the action mask; duration and mask word order; the
zero-duration terminator; edge-start/level-abort of `run`; the AD9852 parallel
write timing and update pulse width; always writing all 40 registers; the
AD7685 serial timing; FIFO overflow handling; the counter clear; the whole
host bus and address map; a single synchronous active-high reset.

Not included: the DDS chips, analog filters, switches and amplifiers, the PMT
conditioning electronics, the ADC chips, the slow-monitoring multiplexer and
ADC (handled by the micro-controller), and the AD9833 spin-flipper DDS
(programmed by the micro-controller over SPI; the firmware only switches
their outputs).

Known limits: the counter gates are generated in the 10 MHz domain and used
asynchronously by the input-clocked counters, so a pulse that coincides with a
gate edge within a flip-flop's setup window may or may not be counted, and
reading a counter while its gate is open can return a value in transition.
Neither matters for the 1 ms timing the experiment requires, but a design
that must read counters on the fly would need a synchronised readout.

The update line of a DDS pair is not aligned to the 500 kHz DDS clock. The
chips take the update on their next clock edge, so the instant the new
frequency and phase take effect can move by up to one DDS clock (2 us)
relative to the micro-timer grid; both chips of a pair still update on the
same edge, so their relative phase is unaffected. At 30 Hz, 2 us is 0.02
degrees of start phase.

## Files

* `rtl/nedm_pkg.sv` – shared constants: action-mask bits, address map,
  DDS bus type.
* `rtl/nedm_fpga_top.sv` – firmware top.
* `rtl/utimer.sv`, `rtl/dds_interface.sv`, `rtl/adc_interface.sv`,
  `rtl/scaler.sv`, `rtl/usb_interface.sv`, `rtl/freq_divider.sv` – the blocks.
* `rtl/dpram.sv`, `rtl/sync_fifo.sv`, `rtl/cnt32.sv` – RAM, FIFO and counter
  helpers.
* `tb/tb_<block>.sv` – one self-checking testbench per block.
* `tb/tb_nedm_fpga_top.sv` – end-to-end test of a shortened measurement cycle
  with default parameters, plus FIFO overflow and abort; it counts that every
  mechanism (micro-timer and host DDS updates, OSK ramps, switches, TTL,
  sampling, overflow, both scaler banks, clear, abort, table end) happened.
* `tb/tb_workload_acquisition.sv` – real-time-scale runs: a 2 s excitation
  pulse with 1 s ramps sampled at 1 kHz, and 1 s of 100 Hz acquisition, with
  the FIFO read out during the run (20 and 10 million clock cycles).
* `tb/ad7685_model.sv` – behavioural ADC model returning the sequence
  `(k * 0x1357) XOR 0xA5C3` for the k-th conversion.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
    -y rtl -y tb +libext+.sv --top-module tb_nedm_fpga_top \
    rtl/nedm_pkg.sv tb/tb_nedm_fpga_top.sv -o sim
./obj_dir/sim
```

Replace the top module name for the other testbenches. The end-to-end test
runs in about a second, the workload test in under a minute.

To change the design, the places to start are `nedm_pkg.sv` (action bits,
address map) and the parameters: `TICKS_PER_US` of `utimer` for another clock,
`N_BYTES` and `UPD_WIDTH` of `dds_interface`, `CONV_CYCLES` of
`adc_interface` for another ADC.
