# A multi-processor computer built from Subleq processors

This is an array of very small processors. Each one executes a single instruction, and each has
its own memory. Because there is only one instruction, a processor needs no opcode decoder and no
ALU beyond one subtractor, so a cheap FPGA can hold many of them. The size of the array is set
by on-chip memory rather than by logic. The original design placed 28 processors on an Altera
Cyclone III EP3C16, with 512 32-bit words (2048 bytes) of memory each, clocked at 150 MHz. A host
PC reaches the chip through a USB-to-SPI bridge controller. The host loads a program into any
processor, watches it run, and reads its memory back. The processors never talk to each other. A
parallel job is cut into pieces on the host, one piece per processor, and the host combines the
pieces' results.

This RTL is a SystemVerilog description of that computer, written from the published
description of the design ("A Simple Multi-Processor Computer Based on Subleq", O. Mazonka and A.
Kolodin). The publication specifies the instruction set, the processor algorithm, the memory
organisation and the host-visible behaviour. It does not give the SPI framing, the byte order,
the reset, or the state-by-state timing. Those are filled in here; the section
[Choices made here](#choices-made-here) lists each one.

## The instruction

A Subleq instruction is three consecutive words `A B C`:

    memory[B] = memory[B] - memory[A]
    if memory[B] <= 0:  IP = C
    else:               IP = IP + 3

Execution begins at address 0 and continues as long as `IP >= 0`. A program ends in one of two
ways:

* **Jump to a negative address.** The usual idiom is `Z Z (-1)`: it clears a zero cell, so the
  branch is always taken, and it jumps to -1.
* **Negative operand.** `A < 0` or `B < 0`. In the Subleq language, `(-1)` as the first operand
  means "read input" and as the second means "write output". This machine has no I/O, so such an
  instruction simply stops the processor without executing.

Arithmetic is 32-bit two's complement and wraps on overflow. Addresses use only their low 9
bits, so an address wraps around the 512-word memory.

Programs modify themselves all the time. There is no indirect addressing, so a pointer is
dereferenced by writing it into an operand of a later instruction. The processor must therefore
behave exactly as the sequential algorithm above. In particular, an instruction whose `B` is its
own `C` cell must still jump to the value `C` had *before* the subtraction.

## The processor and its two-port memory (`subleq_cpu`, `subleq_dpram`)

The memory is a true dual-port RAM with registered reads: an address presented in one clock
gives its data in the next. With two ports, `memory[A]` and `memory[B]` can be read in the same
clock. The price is the extra clock of read latency. The state machine overlaps the fetch of the
next instruction with the branch decision:

| state  | port A                         | port B                           | decision                          |
|--------|--------------------------------|----------------------------------|-----------------------------------|
| FETCH  | read `IP`                      | read `IP+1`                      | only once, right after a start    |
| DECODE | read `memory[A]`               | read `memory[B]`                 | stop if A < 0 or B < 0            |
| EXEC   | read `C = memory[IP+2]`        | write `memory[B] - memory[A]`    | remember `result <= 0`            |
| BRANCH | read next `A` (at the new IP)  | read next `B`                    | `IP = C` or `IP+3`; stop if < 0   |

After BRANCH the machine goes back to DECODE. **One instruction takes 3 clocks**, plus one clock
for the first instruction after a start. At 150 MHz that is 50 million instructions per second
per processor, and 1.4 billion for the 28-processor array.

In EXEC, port A reads `C` in the same clock in which port B writes `memory[B]`. The RAM returns
the old contents when the other port writes the same address in the same clock
(read-before-write). That is exactly the ordering the algorithm requires when an instruction
overwrites its own third operand. The next instruction's operands are read in BRANCH, one clock
after the write, so they always see the new value.

Control is two pulses and two status outputs:

* `start` sets IP to 0 and enters FETCH.
* `stop` returns to idle in the same clock, from any state. If the stop arrives in EXEC, the write
  is suppressed. An instruction is therefore either complete or not begun.
* `running` is high while the processor executes.
* `halted` pulses when the program stops itself.

## Talking to the array (`subleq_spi_slave`, `subleq_spi_ctrl`, `subleq_serial_if`)

The host sees a two-level address table, (processor index, byte address). Each transaction names
the index, and the byte address is implicit: it counts up from 0 with every byte.

**SPI framing.** The bus is SPI mode 0: `sclk` idles low, both sides sample on the rising edge,
and data changes on the falling edge. Bytes go MSB first. One active-low chip-select period is
one transaction. The first byte of a transaction is a command:

    bit 7    : 1 = read, 0 = write
    bit 6    : unused, send 0
    bits 5..0: processor index (0 = the array itself, 1..NUM_PROC = processors)

The index is 6 bits wide, so the addressing scheme has room for at most 63 processors.

**Index 0.** A read returns the number of processors (28), then zeros.

**Write to processor k.** Opening the transaction stops processor k at once. Every following
byte is stored, starting at byte address 0. Bytes are little-endian within each 32-bit word, and
a word is written when its fourth byte arrives. A full load is 2048 bytes. When the chip select
is released, the processor starts at IP = 0. No separate "run" command exists: loading a program
runs it.

**Read from processor k.** The read stream is laid out as follows:

| byte       | content                                         |
|------------|-------------------------------------------------|
| 0          | Status byte                                     |
| 1..3       | zero                                            |
| 4..2051    | memory, little-endian, starting at address 0    |
| 2052 and on| zero                                            |

Reading the Status byte alone never disturbs the processor, so the host can poll it as often as
it likes. Reading further stops the processor, so memory is never read while it is changing.
The Status byte has three values:

| value  | meaning                                                           |
|--------|-------------------------------------------------------------------|
| `0xA0` | stopped, never run since reset                                    |
| `0xA1` | running                                                           |
| `0xA2` | stopped, by its own program or by a host read or write            |

**Precisely when a read stops the processor.** The SPI slave must send the next byte's MSB on the
falling `sclk` edge right after the previous byte's last rising edge. So the controller requests
each byte as soon as the host has clocked out the byte before it. The request for byte 1 is
therefore sent *before* the host has shown any sign of wanting byte 1. That request cannot be the
one that stops the processor, because a host that reads only the Status byte and then releases
the chip select must leave the processor running. The serial interface therefore stops the
processor on the request for byte 2. That request is sent only after the host has actually
clocked out byte 1. Memory bytes start at byte 4, so by the time a memory byte is fetched the
processor is already stopped.

**Clock-domain crossing.** The SPI slave samples `sclk`, `cs_n` and `mosi` in the system clock
domain through two-flop synchronisers. A byte is fetched with this latency chain:

1. A rising-edge event is detected.
2. `rx_valid` is raised.
3. The controller sends the request.
4. The RAM reads the word, and the serial interface registers the byte.
5. The controller latches the byte into `tx_byte`.

The chain is about 6 clocks. It must finish before the following falling edge. Hence the one
timing rule for the host: **`sclk` must be at most `clk`/16** (about 9.4 MHz at 150 MHz). MISO is
driven low while the chip select is high; there is no tri-state on chip.

**Bus hand-over.** Inside a processor node, RAM port A belongs to the processor while it runs and
to the serial interface while it is stopped. Port B is the processor's alone. Every host access
first stops the processor: a write stops it at the start of the transaction, and a read stops it
at byte 2. So the hand-over never cuts an access short.

## Structure

    subleq_array                 top: SPI pins, NUM_PROC nodes, Status bytes out
      subleq_spi_slave           SPI pins <-> bytes (oversampled, mode 0)
      subleq_spi_ctrl            command decode, processor select, read look-ahead
      subleq_node  x NUM_PROC    one processor with its memory
        subleq_serial_if         byte stream <-> memory words, Status byte, start/stop
        subleq_cpu               the Subleq state machine
        subleq_dpram             512 x 32 true dual-port RAM
    subleq_pkg                   sizes, status codes, request bundle type

The controller broadcasts a single request bundle, `subleq_pkg::ser_req_t`, to all nodes, along
with a one-hot select. The bundle carries `begin_rd`, `begin_wr`, `wr_valid` with `wr_byte`,
`rd_req` and `finish`. Every node answers with `rd_valid` and `rd_byte` exactly 2 clocks after a
`rd_req`, and the controller picks the selected node's answer.

Parameters with their defaults: `NUM_PROC` = 28 (legal range 1..63), `WORD_W` = 32 and
`MEM_WORDS` = 512. The whole design runs on one clock.

The PLL, the USB bridge controller, the USB link and the board's DDR2 chip are outside this RTL.
The DDR2 chip is not used by the design. The original design put `clk` through an FPGA PLL from
a board oscillator; here `clk` is simply an input. `rst_n` is a synchronous active-low reset. It
clears all control state but not the memories. The `status` output of the top is not part of the
original host interface; it is there so that a simulation or a logic analyser can watch the
processors.

## Size

A generic word-level synthesis (yosys, memories kept as memory cells) gives these figures:

| unit                       | flip-flop bits | memory bits |
|----------------------------|----------------|-------------|
| one processor node         | 101            | 16,384      |
| SPI slave                  | 35             |             |
| access controller          | 59             |             |
| whole array, 28 processors | 2,922          | 458,752     |

Each node's 16 Kbit of memory fills exactly two of the 8-Kbit RAM blocks of the original FPGA,
and that FPGA has 56 such blocks. That is why the original design stops at 28 processors.
Logic is not what limits the array.

## A parallel job: modular double factorials

The testbenches use the original authors' hand-written benchmark program: 83 instructions, or 249
words. It computes

    X = prod_{n=B+1}^{A} n!  mod M

The inputs sit at fixed cells of the program image: `A` at word 3, `B` at word 4, `M` at word 5.
The result `X` is at word 8. The program has no multiply instruction. It multiplies by halving
and doubling, through a shift-and-add `Mult` loop and a `DivMod` routine reached by
self-modified return jumps. The program halts with `Z Z (-1)`.

To run the job on the array, the host works in three steps:

1. It splits 1..N into one range per processor, writes each range into `A` and `B` of a copy of
   the image, and loads the copies. Loading a copy starts that processor.
2. It polls the Status bytes until all of them read `0xA2`.
3. It reads the first 9 words of each processor, multiplies the `X` values modulo `M`, and gets
   the answer.

The published run used N = 5029 and M = 5039 (answer 95). The largest intermediate value is
about M·N = 2.5·10^7, well inside 32 bits, and the program fills 249 of the 512 words. So that
run fits this design at its default sizes. Simulating it in full would take billions of
instructions. The full-size testbench therefore runs the same job with N = 130 split over 26
processors, and keeps the other two processors for an endless loop and an input instruction.

**How fast the published run would be here.** Running the program in an instruction-level
emulator, with one factorial at a time, gives a cost per factorial that grows from about 170
instructions per factor at n = 10 to about 3,100 at n = 5029. Summed over n = 1..5029, the whole
job is about 3.3·10^10 instructions. At 3 clocks per instruction and 150 MHz, that is about 670 s
on one processor. On 28 processors it is about 24 s if the work is perfectly balanced. If the
28 processors get equal ranges of n, it is about 54 s, because the processor with the largest
n values finishes last. The original hardware needed 62 s with its own state machine and its own
split. These figures are estimates from the emulator, not measurements of this RTL at full size.

`tb/double_factorial.hex` is that program. It was assembled from the published listing, with the
one crossed-out output line left out. One 32-bit word per line, in hex, addresses 0..248. The
testbenches patch `A` and `B` before loading.

## Simulating

Every testbench checks itself and ends with a line `TB_RESULT checks=N failures=M`. Run from the
repository root, because testbenches read `tb/double_factorial.hex` by that relative path:

    verilator --binary --timing --assert -Wno-fatal \
        rtl/subleq_pkg.sv tb/tb_subleq_ref_pkg.sv \
        rtl/subleq_dpram.sv rtl/subleq_cpu.sv rtl/subleq_serial_if.sv rtl/subleq_node.sv \
        rtl/subleq_spi_slave.sv rtl/subleq_spi_ctrl.sv rtl/subleq_array.sv \
        tb/tb_subleq_array.sv --top-module tb_subleq_array -o sim
    ./obj_dir/sim

| testbench              | what it covers                                                                   |
|------------------------|----------------------------------------------------------------------------------|
| `tb_subleq_dpram`      | both ports at random; 1-clock latency; read-before-write across ports            |
| `tb_subleq_cpu`        | example programs, self-modified jump target, double factorial, 40 random programs; whole memory and exact clock count against the reference model |
| `tb_subleq_serial_if`  | status codes, little-endian load, status/pad/memory read stream, 2-clock latency, stop-at-byte-2 rule, partial writes |
| `tb_subleq_node`       | load, poll, run to completion and read back; stop by read; stop on an input operand; 12 random programs against the reference model |
| `tb_subleq_spi_slave`  | mode-0 byte transfer both ways at `clk`/16 and slower                            |
| `tb_subleq_spi_ctrl`   | index 0, select decoding for all 28 indices, write forwarding, read look-ahead, absent indices |
| `tb_subleq_array`      | the whole chip at default size over SPI: the parallel double-factorial job plus every host mechanism (about 9 million clocks, some 15 s of wall-clock time with Verilator) |
| `tb_subleq_array_max`  | 63 processors, the most the 6-bit index can address (16-word memories): count read, loads to processors 1, 2, 32 and 63, no stray selects |

`tb/tb_subleq_ref_pkg.sv` is the reference used for comparison. It is the instruction algorithm
written as a plain loop over an array, together with a direct computation of the double
factorial. The simulator used is two-state, so everything that is read is reset or initialised.

## Choices made here

The publication describes the processors, their memory and the host-visible rules. The following
are this design's own choices:

* **State split.** The processor's state sequence and its 3-clock instruction are choices made
  here. The publication gives no clocks-per-instruction figure. Its benchmark timings suggest an
  average of roughly a thousand clocks per iteration of its compiled C test loop, which says
  nothing about the cycle count of a single instruction.
* **Address wrap.** Addresses wrap modulo the memory size.
* **Reset.** The reset is synchronous and active low. Memory contents are not reset.
* **SPI.** Mode 0, MSB first, chip-select framing, a one-byte command, oversampling with the
  `clk`/16 limit, and MISO held low when idle.
* **Status word and overrun.** Bytes are little-endian. The status word is padded with zeros.
  Bytes past the end of memory are dropped on writes and read as zero.
* **When a write starts the processor.** It starts when the write transaction closes, whatever
  its length. The original text says that writing loads a 2048-byte buffer and starts execution.
  It does not say whether a shorter write also starts it.
* **Stop rules.** A read stops the processor at byte 2, as explained above. A stop aborts an
  instruction cleanly. A restart always begins at address 0.
* **Memory size.** The original text gives the per-processor memory both as "2 Kb" and as "2048
  bytes (512 of 32 bit words)". This design follows the latter, which also matches two 8-Kbit
  RAM blocks per processor.
