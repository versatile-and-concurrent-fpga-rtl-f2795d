# FPGA layer for a quantum-key-distribution transmitter and receiver

A QKD transmitter has to emit a qubit every few tens of nanoseconds, and every
qubit must be set by fresh random bits. At 50 MHz with four bits per qubit
(two for polarization, two for the intensity or "decoy" level), that is
200 Mbit/s of random data. This data cannot be stretched from a short seed
without weakening security, so it has to stream in from outside for hours
without a gap. This RTL is the FPGA part of a small SoC system built for that
job. A processor receives the random data over the network and keeps two
on-chip memories topped up. The fabric reads them at a fixed rate and turns
every 2+2 bits into precisely timed electrical pulses for the laser and the two
modulators.

The same fabric can also run the other way, as the front end of a receiver. It
samples the single-photon detectors on every clock, packs the samples into
words and fills the memory, and the processor then drains it.

The idea that makes the continuous stream work is simple. Each memory is used
as a **ring of two halves**. The fabric works through one half while the
processor rewrites the other. An interrupt at the end of each half hands that
half to the processor.

The architecture follows a published design for a Zynq-7020 SoC, built there
from VHDL blocks and vendor AXI IP. The SystemVerilog here is a new
implementation of the custom blocks. The signalling details, encodings and
sizes that the published description leaves open are this design's own. They
are marked as such below and in each file's header.

## Block structure

```
            processor side (CPU + DMA + GPIO, not part of this RTL)
   cpu_*[0]   cpu_*[1]        mode, tx_enable, tx_cfg, rx_enable      irq[1:0], irq_half[1:0]
      |          |                         |                                   ^
 +----v----+ +---v-----+                   |                                   |
 | BRAM 0  | | BRAM 1  |   tdp_bram, 32768 x 32 bit each, port A = processor   |
 | (pol /  | | (decoy) |                                                       |
 |  rx)    | |         |                                                       |
 +----^----+ +---^-----+   port B = fabric                                     |
      |          |                                                             |
 +----v----+ +---v-----+                                                       |
 |  MM 0   | |  MM 1   |   memory_manager: ring walk, irq per half  -----------+
 +-^----v--+ +---v-----+
   |    |        |   words (valid/ready)
   |  +-v--------v-----------+
   |  | qstates_controller   |--> laser_out, pol_out, decoy_out
   |  +----------------------+
   |  +----------------------+
   +--| spd_reader           |<-- spd_in[NCH-1:0] (asynchronous)
      +----------------------+
```

`qcomm_fpga_top` wires this together. Memory 0 carries polarization symbols
when transmitting and detector samples when receiving. Memory 1 carries the
decoy symbols and is used only when transmitting. All logic runs on one clock.
The published system used 100 to 200 MHz. The transmitter timing below assumes
200 MHz, where one clock cycle is 5 ns.

| File | Role |
|---|---|
| `rtl/qcomm_pkg.sv` | word width, symbol codes, `tx_cfg_t` configuration struct, direction enum |
| `rtl/tdp_bram.sv` | true dual-port RAM, one port for the processor, one for the fabric |
| `rtl/memory_manager.sv` | moves words between a RAM and the fabric in ring order, interrupts per half |
| `rtl/qstates_controller.sv` | symbols to laser / polarization / decoy pulses |
| `rtl/pulse_delay.sv` | per-output time offset (run-time delay line) |
| `rtl/spd_reader.sv` | detector synchronizer, edge detection, sample packing |
| `rtl/qcomm_fpga_top.sv` | the FPGA layer |

## The ping-pong contract between fabric and processor

This is the part that needs the most care when the RTL is reused, because
what makes it correct is the processor software, not the logic.

**Address walk.** A memory manager walks its RAM from address 0 upward and
wraps from `DEPTH-1` back to 0. It restarts at 0 every time its `enable` rises.

**The interrupt.** When the manager uses the last address of a half
(`DEPTH/2-1` or `DEPTH-1`), `irq[i]` is high for exactly one cycle on the next
clock. `irq_half[i]` then names the half just finished: 0 is the lower half,
1 is the upper half. `irq_half` holds its value until the next interrupt, so
a GPIO input that samples slowly can still read it.

**Top-down (transmit).** "Finished" means that the last word of the half has
been read out of the RAM. That word may still be waiting in the manager's
output register or in the controller, but the RAM locations are free. The
processor must rewrite the whole half before the manager wraps round to it
again. The manager gets there after the other half has been consumed. With
`DEPTH = 32768` and a 4-cycle slot at 200 MHz, one half holds 16384 words.
That is 262144 qubits, so the processor has **5.24 ms** per half and per
memory. The two memories are consumed in lockstep, so their interrupts
arrive together. Before raising `tx_enable`, the processor must fill both
memories completely.

**Bottom-up (receive).** Every packed detector word is written to the next
address. The interrupt comes with the write of the last word of a half. The
processor must read that half out before the writer comes back to it. At four
detector lines and 200 MHz, a word arrives every 8 cycles (40 ns), so the
processor has 16384 × 40 ns = **0.66 ms**. That is 800 Mbit/s of raw
samples, more than a gigabit link can carry for long. A real receiver would
use fewer lines or a slower clock.

The logic does not check whether the processor kept its deadline. If a half
is not refilled in time, its old contents are simply sent again. The
published system prevents this with a large buffer in DRAM, sized so that the
network never lets the memory run dry. That buffer belongs to the software
and is not modelled here.

## Qubit slots: from 2+2 bits to pulses

Every qubit uses one **slot** of `P = max(tx_cfg.period, 3)` clock cycles.
Cycle 0 is the first cycle of the slot. Each output produces one-cycle
(5 ns) pulses:

| Output | Pulse |
|---|---|
| `laser_out` | at cycle 0, unless the decoy symbol is "laser off" |
| `pol_out` | at cycle 0, 1 or 2, chosen by the polarization symbol (three polarization states) |
| `decoy_out` | at cycle 0 or 1, chosen by the decoy symbol (two intensity levels); none when the laser is off |

| Code | Polarization symbol | Decoy symbol |
|---|---|---|
| 0 | pulse at cycle 0 | pulse at cycle 0, laser on |
| 1 | pulse at cycle 1 | pulse at cycle 1, laser on |
| 2 | pulse at cycle 2 | laser off (third intensity level) |
| 3 | unused: no polarization pulse | unused: same as code 2 |

`P = 3` is the tightest slot, 15 ns at 200 MHz. `P = 4` gives 50 MHz, the
rate of the long stream test. Larger values leave idle cycles at the end of
the slot.

What this design sets, and the published description leaves open:
- the numeric codes;
- what the unused code 3 does;
- that the polarization pulse is still sent when the laser is off.

The published description fixes the three polarization positions, the two
decoy positions with laser switch-off, the laser pulse at the start of the
slot, and the 5 ns pulse at 200 MHz.

**Data order.** Each 32-bit word carries 16 symbols. Qubit *j* of a word uses
bits `[2j+1:2j]`, so the lowest pair goes first. Word *k* of the polarization
memory and word *k* of the decoy memory describe the same 16 qubits. The
controller takes one word from each memory in the same cycle.

**Timing.** The controller takes a pair of words in cycle *k*. Qubit *j* of
those words then starts its slot in cycle *k+1+jP*. A pulse at slot cycle *c*
appears at the output in cycle *k+2+jP+c+off*, where *off* is that output's
`tx_cfg.off_*` value (0 to 15 cycles). The offsets let the three signals be
lined up with their different cable and optical path lengths. Slots follow
each other back to back as long as words are available. If a manager has no
word ready when one is needed, which happens only at start-up, the controller
waits. The slot train then starts late, but a slot is never cut short.

**Control.** A rising edge of `tx_enable` starts a run of `tx_cfg.length`
qubits. A length of 0 means the run has no end. `tx_busy` is high during the
run. `tx_done` rises after the last slot and stays high until `tx_enable`
falls. Lowering `tx_enable` stops at once, although pulses already inside the
delay lines still come out. `tx_sent` counts the slots started. It wraps after
2^32 qubits, about 86 s at 50 MHz, which does not matter when the length is 0.
Keep `tx_cfg` steady while a run is active.

The first laser pulse appears three cycles after the first clock edge that
sees `tx_enable` high, plus `off_laser`, if the first qubit has the laser on. The three cycles are the memory
read, the manager's output register, and the slot start, with the output
flop counted in the last one.

## Detector reader and the receive word format

Each detector line goes through a two-flip-flop synchronizer and then a
rising-edge detector. A detection therefore becomes a single 1 in the cycle
in which its leading edge was first seen, however long the detector's output
pulse is. Pulses shorter than one clock period can be missed. The time
resolution is one clock period, which suits only low-cost receivers. Sub-ns
resolution needs a time-to-digital converter, and none is included here.

Every cycle produces an `NCH`-bit sample. Sample *k* of a word sits at bits
`[k*NCH +: NCH]`, so with four lines a word covers 8 consecutive cycles.
Consecutive words cover consecutive cycles without gaps while `rx_enable` is
high. An edge on a line reaches the sample 3 cycles later. The first word
after `rx_enable` rises starts at the sample of the edge two cycles before
the first clock at which `rx_enable` was seen high.

## Switching direction

`mode` (`DIR_TOP_DOWN` or `DIR_BOTTOM_UP`) selects what memory 0 is used for:
- top-down: manager 0 reads memory 0 and feeds the qubit controller;
- bottom-up: manager 0 writes the detector words into memory 0.

Change `mode` only while both `tx_enable` and `rx_enable` are low. The
published system instead loads a different FPGA image for each application.
Keeping both paths in one image behind a mode bit is this design's choice.

## Processor-facing ports

The processor, its GPIO peripherals and its DMA engine are not part of this
RTL. Their signals are the top's ports:

- `mode`, `tx_enable`, `tx_cfg`, `rx_enable`: GPIO outputs of the processor.
  `tx_cfg` is a packed struct: `period[7:0]`, `length[31:0]`, `off_laser`,
  `off_pol`, `off_decoy` (4 bits each).
- `tx_busy`, `tx_done`, `tx_sent`, `irq`, `irq_half`: GPIO inputs. `irq` is
  meant to be used as an interrupt source.
- `cpu_en`, `cpu_we`, `cpu_addr`, `cpu_wdata`, `cpu_rdata`: one RAM port per
  memory for the DMA side. Addresses count words. A read returns its data on
  the next clock. A write and a read on the same port return the old word. If
  both ports write the same address in the same cycle, the processor's write
  wins.

On the real chip these would be AXI GPIO blocks and an AXI BRAM path fed by
a DMA engine, which may use a separate clock and byte writes. This RTL
assumes a single clock and word writes.

## What is not here

- **Processor software and the dual-core stream.** In the published system,
  one core receives random data over TCP into a 187.5 MiB DRAM buffer of ten
  blocks. The other core copies a half-BRAM chunk into the FPGA memory on each
  interrupt. All of this is software. Only its behaviour towards the fabric is
  modelled, in the top-level testbench.
- **Random-number extraction** for the random-number-generator use of the
  receiver path, and its variant that is reset by an external trigger. The
  extraction protocols are not specified, so the receiver path stops at raw
  detector samples. That is what a QKD receiver needs.
- **Other transmitter variants.** The published work has several qubit
  controllers for different protocols. This one is the three-position
  polarization, two-position decoy version.
- Vendor AXI peripherals, the DRAM, the I/O standards of the board
  connectors (3.3 V and 1.8 V CMOS), time-to-digital converters, and the
  DACs and ADCs for continuous-variable systems.

## Sizes

| Parameter | Default | Where from |
|---|---|---|
| clock | 200 MHz assumed in timing figures | published transmitter |
| word width | 32 bit | published |
| symbols | 2 bit polarization + 2 bit decoy per qubit | published |
| minimum slot | 3 cycles (15 ns) | published |
| `DEPTH` (words per memory) | 32768 (1 Mbit) | own; published: "order of Mbits" |
| `NCH` (detector lines) | 4 | own |
| offset range | 0–15 cycles | own |
| synchronizer | 2 flip-flops | own |

Two memories of 1 Mbit use 2 of the 4.9 Mbit of block RAM in a Zynq-7020.
Larger values of `DEPTH` must be powers of two, because the halves are found
by address compare at `DEPTH/2-1` and `DEPTH-1`.

## Verification

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if it
hangs.

- `tdp_bram_tb`: random fill and read-back through both ports, read-first
  behaviour, the write collision.
- `memory_manager_tb`: a behavioural RAM and processor. The word stored at
  address *a* in refill *g* is a fixed function of (*g*, *a*). The stream must
  therefore be the ring sequence across five laps with refills picked up.
  Also checked: an interrupt one cycle after each half end, the half flag,
  one word per two cycles, bottom-up writes, and restart at address 0.
- `qstates_controller_tb`: random words from a source that sometimes stalls.
  The expected pulse trains are built from the cycle in which each word pair
  was taken, and every output is compared in every cycle. Runs cover 4-cycle
  slots with an exact 64-cycle word period, 3-cycle slots with offsets of 2,
  5 and 15, a period below the minimum, a long slot, finite and endless runs,
  and abort.
- `spd_reader_tb`: random pulses on four lines, some of them long. Checked:
  every word against the testbench's own sampling, the word rate, and restart
  on a word boundary.
- `qcomm_fpga_top_tb`: end to end at the default sizes, about 3.6 million
  cycles, a few seconds in Verilator. A processor model fills both memories
  and refills each half on its interrupt. It transmits 786485 qubits at
  4-cycle slots with offsets. That is one and a half laps of the ring, so
  refilled data is sent, and the run ends inside a word. Every output is
  checked in every cycle, with slots required to follow each other every
  4 cycles. The model then switches to receive and records 1.5 laps of
  detector data, reading and checking each half on its interrupt. Finally it
  switches back and sends 1000 qubits at 3-cycle slots. The testbench counts
  each mechanism and fails if one never happens: interrupts per memory and
  half, refilled words sent, laser-off slots, each pulse position, offsets,
  end of run, both mode switches, receive interrupts and receive wrap.

Running a testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert --top-module qcomm_fpga_top_tb \
  -y rtl -y tb +libext+.sv -Irtl rtl/qcomm_pkg.sv tb/qcomm_fpga_top_tb.sv
./obj_dir/Vqcomm_fpga_top_tb
```

Swap the module and file name for the other testbenches. The block
testbenches override `DEPTH` and `NCH` to keep runs short. The top-level one
uses the defaults.

What the tests do not establish:
- timing closure at 200 MHz on an FPGA;
- behaviour with a separate AXI clock;
- metastability, which a two-state simulator cannot show.

The RTL has been linted and elaborated with Verilator and with the slang
front end of Yosys, without errors.
