# A DAC-per-clock CCD driver with an FPGA pattern sequencer

An X-ray CCD is read out by a set of clock lines: vertical (parallel
register) phases, horizontal (serial register) phases, a reset gate, and a
sample strobe for the ADC. The usual driver makes each clock by switching
an analog multiplexer between two DAC-set levels, so each line has a fixed
high and low level and changing them is slow. This design gives **every
clock line its own fast 8-bit DAC** and streams DAC codes to all of them
from a sequencer. One sequencer step sets the voltage of every clock at
once. A program can therefore change the timing and the levels together,
including multi-level clock edges and voltage scans, with no change to the
hardware.

The digital part is the FPGA of a small I/O board. It holds the sequencer
programs in an external 512 Kbyte SRAM and downloads them over a serial
line. It plays them out through eight 10-bit DAC ports and one 10-bit
parallel port, and shows its state on a character LCD. This repository
gives the FPGA logic as synthesizable SystemVerilog. It also gives a
behavioural model of one DAC-board channel, so that the clock voltages can
be checked in simulation.

## System structure

```
 host side                 DIO board FPGA (dio_fpga)                          DAC boards
 ---------      +--------------------------------------------------+      (dac_board x 8)
  serial  ----->| serial_interface --trigger/stop--> clock_controller|--8 x 10 bit--> TLC7524-class
  line    (rxd) |      |  byte writes                  |   ^  status |    DAC ports     DAC + amplifier
                |      v                               |   |    |    |                  -> clock volts
                | memory_controller <--3 x 32 bit-- synthesize_pattern|
                |      |  (32-bit reads)          96-bit word         |
                |      v                                        v     |
   SRAM <-------+  sram_* pins                     display_controller |--> LCD (HD44780 bus)
  512K x 8      |                                                     |
                |  parallel_interface (HOLD ...) ---------------------|--> ADC board
                +--------------------------------------------------+
```

| Module | Role |
|---|---|
| `ccd_driver_system` | Top: `dio_fpga` plus a `dac_board` model on each DAC port |
| `dio_fpga` | The FPGA contents: the five state machines and the output ports |
| `serial_interface` (+ `uart_rx`) | Receives downloads, writes them to SRAM, starts/stops the sequencer |
| `memory_controller` | Owns the SRAM: 32-bit reads for the sequencer, byte writes for downloads |
| `synthesize_pattern` | Builds one 96-bit sequencer word from three 32-bit reads |
| `clock_controller` | The sequencer: fetches, decodes and executes words, sends patterns out |
| `display_controller` | Writes the sequencer status to a 2 x 16 character LCD |
| `dac_interface` (x 8) | 10-bit output register per DAC port |
| `parallel_interface` | 10-bit output register for the ADC-board lines (HOLD) |
| `dac_board` | Behavioural model of a DAC channel: code latch and code-to-volt map |
| `ccd_pkg` | Word layout, opcodes, state enum, status struct, command bytes |

The SRAM chip, the LCD module, the ADC board and the host are outside the
design. They connect through the ports of `ccd_driver_system`. The SRAM
data bus is split into `sram_dq_o`, `sram_dq_i` and `sram_dq_oe`, and the
tristate pad is left to the FPGA's I/O cell. The board uses about 135 FPGA
pins: 80 for the DAC ports, 10 for the parallel port, 30 for the SRAM,
11 for the LCD, plus the clock, the reset and the serial input.

## Programs: V-ram and P-ram

A program has two levels.

* A **V-ram** is a short table of clock levels over time. Each row gives
  the level of every clock in volts, and the rows follow each other at a
  fixed step. Typical V-rams are "read one pixel" (serial-register
  phases, reset gate and HOLD) and "transfer one line" (vertical phases).
* A **P-ram** strings V-rams together with a few commands:

| Command | Meaning |
|---|---|
| `seq n, vram` | play V-ram `vram` `n` times |
| `set wait n` | hold every following pattern for `n` extra clock cycles |
| `do n` ... `end do` | repeat the enclosed block `n` times (nesting allowed) |
| `jmp label` | jump |
| `label:`, `# text` | label and comment; no code is generated |

The readout loop for a 1024 x 1024 CCD is:

```
set A = 64
set B = 2
start:
  do 1024
    set wait A
    seq 1 vertical
    set wait B
    seq 1024 horizontal
  end do
jmp start
```

A host-side compiler turns both levels into 96-bit **sequencer words**
(see below) and downloads them. It converts each level to a DAC code. It
also inserts the DAC's **reference clock**: the DAC on each port latches
its 8-bit code on a rising edge of bit 8 of the port. So each V-ram row
becomes two pattern words: first the new codes with bit 8 low, then the
same codes with bit 8 high. The data is then stable on the port for a
whole word time before the latch edge. HOLD and the other ADC-board lines
go in the parallel field of the same words. The testbench package
`tb/ccd_asm_pkg.sv` holds an assembler for this format.

## The sequencer word

All words are 96 bits. The opcode is in bits [95:92].

| Opcode | Name | Operands |
|---|---|---|
| `4'h1` | `OP_PAT` | DAC port *i* in bits `[10i+9:10i]` (*i* = 0..7); parallel port in `[89:80]` |
| `4'h2` | `OP_SEQ` | repeat count `[31:0]`, V-ram start word `[47:32]`, V-ram length in words `[63:48]` |
| `4'h3` | `OP_WAIT` | wait cycles `[31:0]` |
| `4'h4` | `OP_DO` | loop count `[31:0]` |
| `4'h5` | `OP_ENDDO` | none |
| `4'h6` | `OP_JMP` | target word `[15:0]` |
| other | no-op | none |

A DAC port carries its 8-bit code in `[7:0]` and the reference clock in
bit 8. Bit 9 is spare, so that a 10-bit DAC can be fitted later. In
memory, word *w* occupies bytes `12w` to `12w+11`, little-endian: byte
`12w` holds bits [7:0]. The 16-bit word address covers the whole SRAM
(43,690 words).

## How the Clock Controller runs a program

`clock_controller` is a five-state machine:

```
IDLE --trigger--> MEMCHK --done--> FETCH --> DECODE --pattern, wait>0--> WAIT --count--> MEMCHK
                    ^                          |                                            
                    +------- otherwise --------+                                            
```

* **IDLE**: waits for a trigger from the serial interface. On the trigger
  it clears the loop stack and the wait count, and starts at word 0.
* **MEMCHK**: sends the word address (`pc`) and a start pulse to
  `synthesize_pattern`, then waits for the 96-bit word.
* **FETCH**: stores the word in the instruction register.
* **DECODE**: executes the word.
  * `PAT` pulses `dac_load`/`par_load`. All eight DAC registers and the
    parallel register take their fields on that clock edge.
  * `SEQ` saves the return address and the V-ram base, length and repeat
    count, then jumps into the V-ram. Every word inside a V-ram is played
    as a pattern. At the end of the V-ram the controller goes back to its
    start until the repeat count is used up, then returns to the word
    after the `SEQ`. A count or length of 0 skips the `SEQ`.
  * `DO` pushes the loop start and count onto a `LOOP_DEPTH`-entry stack.
    If the stack is full, the push is dropped and the sticky
    `loop_overflow` flag is set.
  * `ENDDO` decrements the top count and jumps back while it is above 1,
    otherwise it pops the entry. A count of 0 or 1 runs the body once.
    An `ENDDO` with an empty stack does nothing.
  * `WAIT` and `JMP` set the wait register and `pc`.
* **WAIT**: after a pattern, holds it for the current wait count.

A `stop` from the serial interface sends the controller to IDLE from any
state. The DAC and parallel registers keep their last values, so the
clocks freeze at their last levels.

### Timing

The fetch of one 96-bit word is the critical path of the whole design.

| Cycle | What happens |
|---|---|
| 0 | MEMCHK: `sp_start` is high |
| 1 | the memory controller accepts read 1 of 3 and puts byte 0 on the SRAM bus |
| 1-12 | 12 SRAM byte reads, one per cycle; `rd_ack` in cycles 4, 8 and 12 |
| 13 | `done`: the 96-bit word is valid |
| 14 | FETCH |
| 15 | DECODE; the pattern reaches the output registers at the end of this cycle |

The fetch therefore takes 13 cycles, and every word costs 16 cycles. A
pattern word costs 16 + *wait* cycles. Control words cost 16 cycles and
produce no output. At the assumed 4 MHz clock:

* The fastest pattern rate is 4 MHz / 16 = **250 kHz**.
* One V-ram row (two words, because of the reference clock) at wait *B*
  takes 2 x (16 + *B*) cycles. That is 36 cycles, or 9 us, at *B* = 2.
* The 16-row pixel V-ram takes 576 cycles, a pixel rate of about 6.9 kHz.
  A full 1024 x 1024 frame with the loop above takes about 604 million
  cycles, or 151 s.

Faster pixel rates need shorter V-rams. At wait 0, a 50 kHz pixel rate
allows 5 words per pixel.

## Downloading

`serial_interface` receives 8N1 asynchronous serial bytes (default
9600 baud) and understands three commands:

| Bytes | Action |
|---|---|
| `'L'` a_lo a_hi n_lo n_hi d0 ... d(12n-1) | Stop the sequencer. Write *n* words starting at word *a* (byte `12a`), one byte per write. After the last byte, trigger the sequencer, which restarts at word 0. |
| `'R'` | Trigger: restart from word 0 |
| `'S'` | Stop |

Other bytes in the command position are ignored. `frame_err` pulses on a
bad stop bit. Loading with *n* = 0 just triggers. One `'L'` can hold the
whole program, or V-rams and the P-ram can be loaded separately; only the
last load needs to be complete before the run starts.

## Memory controller

`memory_controller` serves two request ports on a 512K x 8 asynchronous
SRAM.

* **Read port.** A read returns 32 bits. The controller accepts the
  request in the cycle it sees `rd_req` while idle, and drives the first
  byte address combinationally in that cycle. It captures one byte on
  each clock edge and raises `rd_ack` with `rd_data` in the fourth cycle.
  A client that holds `rd_req` high and moves `rd_addr` on after each ack
  gets one 32-bit word every 4 cycles.
* **Write port.** A byte write takes 3 cycles: accept, `we_n` low, and a
  hold cycle in which `we_n` rises with address and data still stable.
  The write port uses a request/acknowledge handshake: `wr_req` is held
  until `wr_ack`.

Reads win over writes. In use they never overlap, because a download
stops the sequencer first. Assertions check the write handshake and that
the FPGA never drives the bus while the SRAM output is enabled.

## Display

`display_controller` drives an HD44780-type 2 x 16 character module on an
8-bit bus. It waits for the power-up time (15 ms), sends `38 0C 01 06`
(8-bit bus with two lines, display on, clear, increment), and then
rewrites both lines without end:

```
MCHK PC=002A D1      state, word address (hex), do-loop depth
VRAM LOAD            PRAM or VRAM (inside a seq); LOAD while downloading
```

The status is sampled once at the start of each refresh, so the two lines
always agree. Each bus transfer is: RS and data set for one cycle, E high
for 2 cycles, then E low for 50 us, or 2 ms after a clear.

## DAC board model

`dac_board` is not synthesizable. It latches `port[7:0]` on the rising
edge of `port[8]` and outputs `vout = VMIN + code x (VMAX - VMIN) / 255`.
The default range is -15 V to +15 V, which gives 0.118 V per step. The
real board also isolates the logic through a photo-coupler, and the DAC
settles in about 100 ns. Both delays are shorter than one 250 ns clock and
are not modelled. A +-20 V board only needs other `VMIN`/`VMAX` values.

## Parameters

| Parameter | Default | Where | Origin |
|---|---|---|---|
| `CLK_HZ` | 4,000,000 | top, `dio_fpga`, serial, display | Assumed: 13 fetch cycles at 4 MHz (3.25 us) is close to the ~300 kHz quoted for the original board |
| `BAUD` | 9,600 | top, `dio_fpga`, serial | Assumed |
| `LOOP_DEPTH` | 4 | top, `dio_fpga`, `clock_controller` | Assumed |
| `AW` | 19 | `memory_controller`, `synthesize_pattern` | 512 Kbyte SRAM |
| DAC ports x width | 8 x 10 | `ccd_pkg` | Board description |
| Parallel port width | 10 | `ccd_pkg` | Board description |
| Word width | 96 | `ccd_pkg` | Board description |
| `LCD_POWERUP`, `LCD_CMD`, `LCD_CLEAR` | 15 ms, 50 us, 2 ms | top, display | HD44780 datasheet times |
| `VMIN`, `VMAX` | -15 V, +15 V | `dac_board` | Board description |

## What follows the original design and what does not

These parts follow the original description:

* One DAC per clock.
* Eight 10-bit DAC ports, a 10-bit parallel port carrying HOLD, and a
  512 Kbyte SRAM.
* The five-block partition of the FPGA.
* The serial download that ends in a trigger.
* The Clock Controller states idle, memory check, fetch and decode, and
  the wait after each pattern.
* The three memory reads assembled into 96 bits, and the 13-step fetch.
* The P-ram command set, and the reference clock inserted by the compiler.
* Status shown on an LCD.

These are this design's own choices, because the original leaves them
open:

* The bit layout of the 96-bit word and the opcodes.
* How `seq` refers to a V-ram (start and length held in the word).
* Loop nesting depth 4, and the treatment of zero counts.
* Start at word 0 on every trigger.
* The serial format and commands, including the stop and run commands.
* The 32-bit read size and the SRAM bus timing.
* The LCD type, layout and timing.
* The reset levels: DAC ports 0x080 (about 0 V), parallel port 0.
* The clock frequency and the baud rate.
* The two-words-per-row reference-clock scheme.

Known differences and limits:

* **Pattern rate.** The fetch takes the 13 cycles of the original, but
  the separate FETCH and DECODE states and the issue cycle make a word
  cost 16 cycles. The result is 250 kHz at 4 MHz, against the ~300 kHz
  quoted. A 4.8 MHz clock would give 300 kHz.
* **1 MHz readout.** The ≥ 1 MHz readout goal of the original
  requirements is not reached, as in the original.
* **Wait on control words.** The wait count applies only after pattern
  words. Control words take one word time and no wait.
* **FPGA device.** The FLEX 10K device, the SRAM chip, the ADC board and
  the host are not part of the RTL.
* **Analog chain.** Only the code-to-volt function of the DAC board is
  modelled. Noise, settling and the amplifier circuit are not.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_memory_controller` | Write port into an SRAM model. 32-bit reads with byte order. 4-cycle read latency, 3-cycle write. Back-to-back reads at 4 cycles per word. |
| `tb_synthesize_pattern` | 96-bit word assembly from random SRAM contents. Exactly 3 reads. Start to done is 13 cycles. |
| `tb_clock_controller` | Runs a program that uses every command: `set wait`, `seq` with repeats, nested `do`, `jmp`, no-op. It is checked word by word, with cycle-exact gaps, against an independent interpreter in the testbench. Also checks stop, restart from word 0, and loop-stack overflow. |
| `tb_serial_interface` | Serial frames in. Every written byte and address. Stop at the start of a load, a single trigger after the last byte, the run and stop commands, an empty load, an unknown byte, a framing error. |
| `tb_display_controller` | An HD44780 bus model. Init commands, E width, command and clear delays, and the displayed text for five status values. |
| `tb_dac_interface`, `tb_parallel_interface` | Reset value, load and hold. |
| `tb_dac_board` | Latch on the rising reference edge only, the code-to-volt map, range ends, step size. |
| `tb_dio_fpga` | FPGA alone, reduced size. Downloads the readout program, then checks the DAC codes and HOLD at every latch edge, the row timing, stop and run. |
| `tb_ccd_driver_system` | Whole system, reduced size (1 MHz clock, 100 kbaud, 4 x 3 pixel frames). Checks voltages, HOLD and timing over two frames, plus stop and run. It counts each mechanism and fails if one never happens: download, auto trigger, seq, do loop, jmp, both wait values, HOLD, stop, run, display. |
| `tb_ccd_driver_full` | Whole system at the default parameters (4 MHz, 9600 baud, full LCD timing). Runs the readout program above with 1024 pixels x 256 lines. This is about 151 million clock cycles, around 2.5 minutes of simulation. It checks every one of the ~4.2 million V-ram rows. |
| `tb_multilevel_clock` | Five-level clocking: one clock steps -8, -4, 0, +4, +8 V and back while the others stay fixed. Checks the levels and the time on each level. |

The largest run is `tb_ccd_driver_full`, at 256 of the 1024 lines of the
frame; every line is identical. A complete 1024-line frame at the default
parameters has not been simulated. It is about 604 million cycles,
roughly 8 to 10 minutes with Verilator.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv -Irtl \
  rtl/ccd_pkg.sv tb/ccd_asm_pkg.sv tb/tb_ccd_driver_system.sv \
  --top-module tb_ccd_driver_system
./obj_dir/Vtb_ccd_driver_system
```

Replace the testbench name to run another one. Lint a module with
`verilator --lint-only -Wall -y rtl +libext+.sv rtl/ccd_pkg.sv rtl/<module>.sv`.
The lint warnings that remain are unused package constants, and the
reset used both in the flops and in the `disable iff` of assertions.
