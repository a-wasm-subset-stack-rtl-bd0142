# A WASM-subset stack processor for small FPGAs — SystemVerilog RTL

This is a 32-bit soft processor that runs a small, WebAssembly-flavoured
stack instruction set. It was made for FPGAs with only a few thousand LUTs, such as the
Gowin GW1NR-9 on the Tang Nano 9K. It makes three choices to save logic
and block RAM:

* **Zero-address instructions.** Operands are implicit: they are the top items of a
  data stack. Most instructions are one byte long, which keeps code dense.
* **Execute in place from serial flash.** Instructions are read one byte at a time from an
  external SPI NOR flash. No block RAM is spent on program memory.
* **Two shallow stacks in LUT RAM.** The data stack and the return stack are 8 entries of
  32 bits each, in LUT RAM. The one 1 KB block RAM is left for data.

The RTL here implements the published architecture: its instruction table, its 12-state
control FSM, its system structure and its fix for a stack read-modify-write race.
Where that description stops, this RTL makes its own choices. Each one is listed below
under "What is given and what is chosen".

## System

```
              Data stack 8x32    Return stack 8x32
                        \            /
  SPI flash  <-->  [spi_flash_ctrl] <-- 24-bit addr / 8-bit data --> [stack_cpu] <-- 32-bit --> [data_ram 1 KB]
  (off chip)                                                              |
                                                                        8-bit
                                                                          |
                                                              [uart 115200 8N1] <--> serial console
```

| File | Role |
|---|---|
| `rtl/wasm_pkg.sv` | Shared definitions: opcodes, ALU operations, stack commands and FSM states |
| `rtl/wasm_soc.sv` | Top level. Connects the CPU, flash controller, RAM and UART. Ports: `clk`, `rst_n`, the four SPI flash pins, `uart_tx`/`uart_rx`, and debug outputs for the FSM state, PC and both stack pointers |
| `rtl/stack_cpu.sv` | The core: control FSM, program counter, immediate register, both stacks and the ALU |
| `rtl/lifo_stack.sv` | One circular stack, 8 x 32, with asynchronous read. It is instantiated twice |
| `rtl/alu.sv` | Combinational ALU |
| `rtl/spi_flash_ctrl.sv` | Reads one byte from SPI flash per request |
| `rtl/data_ram.sv` | 256 x 32 data RAM with a registered read, so it maps to block RAM |
| `rtl/uart.sv` | 8N1 transmitter and receiver at 115200 baud from 27 MHz |

The CPU is the only bus master. Everything runs on one clock (27 MHz on the board)
with one asynchronous active-low reset.

## Instruction set

Every instruction starts with a one-byte opcode. `PUSH`, `BR_IF`, `JUMP` and `CALL`
take a 32-bit immediate in the four bytes after the opcode, least significant byte first.
For example, `push 0x12345678` is `01 78 56 34 12`. All other instructions are a single
byte. In the stack effects below, `b` is the top of the stack and `a` is the item under it.

| Opcode | Mnemonic | Effect | Notes |
|---|---|---|---|
| 01 | PUSH imm | ( -- n ) | |
| 05 | DROP | ( n -- ) | |
| 12 | DUP | ( n -- n n ) | |
| 13 | SWAP | ( a b -- b a ) | |
| 14 | OVER | ( a b -- a b a ) | |
| 02 / 03 / 04 | ADD / SUB / MUL | ( a b -- a op b ) | Wraps at 32 bits. MUL keeps the low 32 bits of the product |
| 16 / 17 | AND / OR | ( a b -- a op b ) | |
| 19 | NOT | ( n -- ~n ) | Bitwise |
| 09 | EQ | ( a b -- a==b ) | Result is 1 or 0 |
| 0A / 0B | LT_S / GT_S | ( a b -- a<b ) | Signed comparison |
| 35 | EQZ | ( n -- n==0 ) | |
| 0E | BR_IF imm | ( c -- ) | Branches to imm if c != 0 |
| 0F | JUMP imm | ( -- ) | |
| 10 | CALL imm | ( -- ) | Pushes the return address on the return stack |
| 11 | RET | ( -- ) | Pops the return address |
| 1D | LOAD | ( addr -- val ) | addr is a word index into data RAM |
| 1E | STORE | ( val addr -- ) | |
| 08 | PRINT | ( n -- ) | Sends the low byte on the UART. Waits until it has been sent |
| 1F | KEY | ( -- char ) | Waits for a received byte |

Branch, jump and call targets are flash byte addresses. Only the low 24 bits of the
immediate are used. The published instruction set is said to have 40 instructions, but
only the 23 above are defined. Any other opcode runs as a no-op. There is no divide
instruction, so division is done in software.

## The control FSM

`stack_cpu` is controlled by one FSM with twelve states:

| State | What happens |
|---|---|
| FETCH | Asks the flash port for the byte at `pc` |
| FETCH_WAIT_LOW | Waits until the flash port is busy (`fetch_ready` falls) |
| FETCH_WAIT_HIGH | Waits until the byte is there (`fetch_ready` rises). Latches the opcode and increments `pc` |
| DECODE | Goes to FETCH_IMM for PUSH, BR_IF, JUMP and CALL, otherwise to EXECUTE |
| FETCH_IMM, IMM_WAIT_LOW, IMM_WAIT_HIGH | Same as the three fetch states, but shifts the byte into the immediate register. Runs four times |
| EXECUTE | One clock: ALU, stack command, PC change, RAM access, or UART start |
| ALU_WAIT | For comparisons: writes the latched result to the top of the stack |
| MEM_WAIT | For LOAD: writes the block RAM word that arrives one clock after the address |
| UART_WAIT | For PRINT: waits until the whole frame has been sent |
| KEY_WAIT | For KEY: waits for a received byte, pushes it and acknowledges it |

The flash port handshake is level based. `fetch_ready` is high while the port is idle.
It falls on the clock after a one-clock `fetch_req`, and it rises again when `fetch_data`
holds the byte. The two wait states follow these two edges. This is what makes the
published instruction timings come out exactly, for a port that answers in one clock:

* one-byte instruction: FETCH + WAIT_LOW + WAIT_HIGH + DECODE + EXECUTE = **5 clocks**
* instruction with an immediate: 3 + 1 + 4 x 3 + 1 = **17 clocks**
* comparison or LOAD: one more clock (ALU_WAIT or MEM_WAIT)

`tb_stack_cpu` checks these counts against a one-clock program memory.

## Stacks and the comparison wait state

Each stack is a `lifo_stack`. It has eight 32-bit entries and a 3-bit pointer `sp` that
points at the top item. Reads are asynchronous: `tos = mem[sp]` and `nos = mem[sp-1]`.
The CPU sends one command per clock:

| Command | Pointer | Write |
|---|---|---|
| PUSH | sp+1 | mem[sp+1] = wdata |
| POP | sp-1 | none |
| POP2 | sp-2 | none |
| POP_WRITE | sp-1 | mem[sp-1] = wdata (used by binary operations) |
| WRITE_TOP | unchanged | mem[sp] = wdata |
| SWAP | unchanged | swaps mem[sp] and mem[sp-1] |

The pointer wraps around, so the stack is a circular buffer. A ninth push overwrites
the oldest item, and nothing flags it. Software must stay within eight entries. In the
published design, four entries were too few for the calculator program and eight were
enough. After reset `sp` is 7, so the first push writes entry 0. The entries themselves
are not reset.

**The race.** A comparison such as `EQ` pops two items and pushes one result. Written
naively, the comparison reads `stack[sp-1]` and `stack[sp-2]`, decrements `sp` and writes
`stack[sp]`, all in one clock. The result can then be written to the wrong entry, or the
comparator can see the stack outputs change while `sp` changes. The fix splits the
operation over two clocks:

1. EXECUTE: compare `nos` with `tos` combinationally. Latch the result in `temp_alu`.
   Decrement `sp`.
2. ALU_WAIT: `sp` is now stable. Write `temp_alu` to the new top.

This RTL uses the split for EQ, LT_S, GT_S and EQZ. Writing the recomputed ALU output in
ALU_WAIT, instead of the latched value, gives wrong comparison results, and
`tb_stack_cpu` detects it. ADD, SUB, MUL, AND and OR finish in EXECUTE. Their result
goes through POP_WRITE, which writes the entry `sp-1` by its explicit address in the
same edge that moves `sp`. So they do not have the race.

SWAP writes two entries in one clock. That needs a LUT RAM with two write ports, or
flip-flops. Synthesis picks whichever it can.

## Instruction fetch over SPI

`spi_flash_ctrl` reads each byte with its own standard READ transaction (command 0x03)
in SPI mode 0:

1. Chip select goes low.
2. The command byte and the 24-bit address go out MSB first.
3. Eight data bits are sampled on rising SCK edges.
4. Chip select goes high.

SCK runs at clk / (2 x `CLK_DIV`), which is 13.5 MHz by default. One byte costs 82 clocks.
Through this controller, instructions take:

| Instruction | Clocks |
|---|---|
| One-byte instruction | 85 |
| Comparison | 86 |
| Instruction with an immediate | 417 |

`tb_wasm_soc` checks these numbers. On the multi-digit calculator program the average is
about 196 clocks per instruction, or 0.14 MIPS at 27 MHz. The published figures of 5
clocks and 4-6 MIPS hold only if the fetch port delivers a byte in about one clock.
That is not possible with a serial flash read. It would take a prefetch buffer or an
instruction cache, which is not part of this design. This is the main difference
between this RTL and the published performance claims.

The program sits at flash address `FLASH_BASE` (0 by default). On a real board the
bitstream usually occupies the start of the flash, so set `FLASH_BASE` to where the
program image is written.

## Data RAM and UART

**Data RAM.** `data_ram` has 256 words of 32 bits (1 KB). It has one port with a
synchronous write and a registered read. LOAD and STORE take the word index from the
low 8 bits of the address on the stack.

**UART.** `uart` works at 115200 baud from 27 MHz, which is 234 clocks per bit (8.67 us).
It sends 8N1 frames: a start bit (0), eight data bits LSB first, and a stop bit (1).
For example, 'A' (0x41) goes out as `0 1000 0010 1`. The receiver synchronises `rxd`,
checks the start bit half a bit after the falling edge, and samples each bit in its
middle. It holds one byte until the CPU acknowledges it. If a second byte arrives
before then, it replaces the first.

## Programs

* **Single-digit calculator.** `tb/calc_single_digit.hex` is the published 168-byte binary
  of a `+ - *` calculator. It prompts with `> `, echoes the keys, and prints the result
  digit. `tb_calculator` runs it unchanged on the whole system at default parameters,
  for example typing `1+2` and getting `3`.
* **Multi-digit calculator.** The published multi-digit calculator with software division
  is described but its code is not given. `tb_multidigit_calc` holds a program written
  for this RTL that follows that description. It accumulates digits as
  `value = value*10 + (char - '0')` in data RAM and divides by repeated subtraction
  with `LT_S`/`BR_IF`. It prints in decimal with a recursive subroutine, so it exercises
  CALL/RET, LOAD/STORE and the stacks together. It reproduces the console session
  `8 / 2` → 4, `1 * 2` → 2, `5 - 2` → 3. A 5-digit result takes the data stack to exactly
  8 entries.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` at the end. Each one also has a
watchdog that counts a failure if the run hangs. Build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/wasm_pkg.sv tb/tb_wasm_soc.sv --top-module tb_wasm_soc
./obj_dir/Vtb_wasm_soc
```

Run it from the directory that holds `rtl/` and `tb/`, because `tb_calculator` reads
`tb/calc_single_digit.hex` by that relative path.

| Testbench | What it checks |
|---|---|
| `tb_alu` | Every operation against a reference model, on corner values and random operands |
| `tb_lifo_stack` | Random command streams against a reference circular stack; the push-3/ADD example; wrap-around |
| `tb_data_ram` | Full write/read sweep and random traffic, with the one-clock read latency |
| `tb_uart` | Bit-by-bit frame of 'A' and its 234-clock bit time; loopback of random bytes; a receiver fed with bits 2% too long |
| `tb_spi_flash_ctrl` | Random reads from the flash model: data, command, address, handshake, and the 82-clock transaction |
| `tb_stack_cpu` | A program that uses every instruction, with a one-clock fetch port: results, balanced stacks, and 5/17/6-clock timing |
| `tb_wasm_soc` | Whole system at default parameters with a self-test program in flash. It counts that each mechanism happened: immediate fetch, ALU_WAIT, MEM_WAIT, UART_WAIT, blocking KEY, taken and untaken branches, call and return, and a data-stack overflow. It also checks instruction timing through SPI |
| `tb_calculator` | The published calculator binary, whole console text checked |
| `tb_multidigit_calc` | The multi-digit calculator, about 20 s of simulation |
| `tb_stack_depth_study` | Three systems with 4-, 8- and 16-entry stacks each run `1+2` on the calculator binary. With 4 entries the stack overflows and `]` is printed instead of `3` |

`tb/spi_flash_model.sv` (a READ-only SPI NOR flash) and `tb/uart_host_model.sv` (a serial
terminal) are behavioural models that exist only for simulation.

## Parameters

| Module | Parameter | Default | Meaning |
|---|---|---|---|
| `wasm_soc` | `CLK_HZ`, `BAUD` | 27 000 000, 115 200 | Clock frequency and baud rate |
| `wasm_soc` | `DSTACK_DEPTH`, `RSTACK_DEPTH` | 8, 8 | Stack depths (powers of two) |
| `wasm_soc` | `RAM_BYTES` | 1024 | Data RAM size |
| `wasm_soc` | `SPI_CLK_DIV` | 1 | SCK half-period in clocks |
| `wasm_soc` | `FLASH_BASE` | 0 | Flash offset of program address 0 |

The published depth study compared 4, 8 and 16 entries. It found 8 to be the best fit
for the GW1NR-9: 4 overflowed on the calculator, and 16 did not close timing. The other
depths can be built by changing the depth parameters. `tb_stack_depth_study` shows the
overflow: the calculator needs five entries while it tests the operator.

## What is given and what is chosen

These parts follow the published description:

* the opcodes and stack effects
* the 32-bit little-endian immediates
* the 8 x 32 circular stacks with asynchronous read
* the comparison-then-ALU_WAIT split
* the FSM state names FETCH / FETCH_WAIT_LOW / FETCH_WAIT_HIGH / DECODE / FETCH_IMM (x4) /
  EXECUTE / ALU_WAIT / UART_WAIT / KEY_WAIT
* the 5- and 17-clock instruction timings for a one-clock fetch
* the 24-bit address and 8-bit data flash link
* the 1 KB data RAM on a 32-bit path
* UART at 115200 baud from 27 MHz, LSB first, as in the published timing diagram of 'A'

These are this design's own choices:

* **The twelve FSM states.** Only nine are named in the description. This design adds
  IMM_WAIT_LOW/HIGH and MEM_WAIT to make twelve.
* **The flash handshake.**
* **The SPI controller.** It uses READ 0x03, mode 0, SCK = clk/2, and one transaction per
  byte with no burst.
* **Memory addressing.** RAM is word addressed, and LOAD has one read wait state. The
  description calls the RAM "single-cycle".
* **Call, return and branch targets.** CALL pushes the address of the next instruction,
  and targets use the low 24 bits of the immediate.
* **Undefined opcodes** run as no-ops.
* **The UART receiver:** a one-byte holding register with overwrite.
* **Reset values:** PC 0 and both stack pointers 7.
* **The debug ports** on the top level.

The published design also includes a Node.js two-pass assembler. It is software and is
not reproduced here. The testbenches assemble their programs with small SystemVerilog
helper functions.
