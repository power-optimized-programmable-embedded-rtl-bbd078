# PEC: a clock-gated 16-bit programmable embedded controller

This is a small 16-bit RISC-style controller built to use little power. Its
control unit knows, cycle by cycle, which blocks of the datapath have to
capture something at the next clock edge. It gives the clock only to those
blocks. The other blocks get no clock edge, so their clock nets, flip-flops and
the logic behind them stay still. On top of that sit the peripherals of a
microcontroller: an output port, an input port, a BCD to 7-segment driver and a
UART. A programmable on-chip oscillator (the "clocker") provides the clock.

The RTL follows the architecture published by M. Kamaraju, K. Lal Kishore and
A.V.N. Tilak in "Power optimized programmable embedded controller": its block
set, its opcode table, the control unit's signal list and its clock-gating
scheme. That description leaves out the instruction fields, the
micro-sequencing, the bus structure and nearly all timing. Those parts are
this design's own, and the section "Where this design departs from or fills
in the original" lists them.

## Architecture

```
              +-------------------- 16-bit data bus (one driver per cycle) -------------------+
              |        |          |          |         |         |        |        |        |
          Reg0..7    OpReg ---> ALU --> Shifter --> outReg     PC -> AddrReg -> ROM    InstReg
          (regfile)    |         ^                             (128 x 16)            |
              |        +--> Comparator --compout--+                                  v
              |                                   |                         +---------------+
         RamAddrReg <- imm8 of InstReg            +-----------------------> | control unit  |
              |                                                             | (FSM, 2 proc.)|
          RAM 1K x 16        Port0R -> P0[7:0]   P1[7:0] -> Port1R          +---------------+
                             7segReg -> BCD->7seg -> a..g                   |  ctrl_t (bus source, strobes,
                             UART (tx, rx)                                  |  selects) + 8 clock-gating
                                                                            v  signals -> 8 clock gates
```

| Block | Module | Size | Clock |
|---|---|---|---|
| Register file | `pec_regfile` | 8 x 16 bit | gated, *regfile* |
| OpReg, outReg | `pec_reg` | 16 bit each | gated, *alu* |
| ALU | `pec_alu` | 16 bit, 10 operations | combinational |
| Shifter | `pec_shifter` | 1-bit shift / rotate | combinational |
| Comparator | `pec_comparator` | unsigned, 6 conditions | combinational |
| Program counter, Address Reg, InstReg | `pec_pc`, `pec_reg` | 7, 7, 16 bit | gated, *rom* |
| Program ROM | `pec_rom` | 128 x 16 (256 bytes) | none (asynchronous read) |
| Ram Address Reg, data RAM | `pec_reg`, `pec_ram` | 10 bit, 1024 x 16 | gated, *ram* |
| Output port 0 | `pec_port0` | 8 pins | gated, *port0* |
| Input port 1 | `pec_port1` | 8 pins | gated, *port1* |
| 7segReg + decoder | `pec_bcd7seg` | 4 bit to 7 segments | gated, *seg7* |
| UART | `pec_uart` | 8N1 | gated, *uart* |
| Control unit | `pec_control` | 7 states | free-running |
| Clock gate | `pec_clock_gate` | one per domain, 8 in all | |
| Clocker | `pec_clocker` | 44 to 134 MHz | behavioural model |

`pec_core` joins all of the above except the clocker. It has one clock input and
is fully synthesizable. `pec_top` adds the clocker and is the chip top.
`pec_pkg` holds the opcodes, select codes, state type and the two control
structs.

Everything is on one internal 16-bit bus. In each cycle the control unit names
exactly one source for the bus (`ctrl.bus_src`: register file, OpReg, outReg,
PC, ROM, the immediate field of InstReg, RAM, port 1 or the UART's received
byte). It also raises the write strobes of the units that load from the bus.
The ALU takes operand a from OpReg and operand b from the bus, and its result
goes through the shifter into outReg. The comparator compares OpReg with the
bus and returns a single bit, `compout`, to the control unit.

## Instruction set

Every instruction is one 16-bit word with direct addressing:

```
 15    11 10   8 7    5 4    2 1  0
+--------+------+------+------+----+
| opcode |  ra  |  rb  |  rt  | -- |   register form
+--------+------+------+------+----+
| opcode |  ra  |      imm8        |   immediate / address form
+--------+------+------------------+
```

| Opcode | Mnemonic | Operation | Cycles |
|---|---|---|---|
| 00000 | NOP | none | 3 |
| 00001 | LOAD | ra <- RAM[imm8] | 4 |
| 00010 | STORE | RAM[imm8] <- ra | 4 |
| 00011 | MOVE | ra <- rb | 4 |
| 00100 | LOADI | ra <- zero-extended imm8 | 3 |
| 00101 | BI | PC <- imm8 | 3 |
| 00110 | BGTI | if ra > 0: PC <- imm8 | 3 / 4 taken |
| 00111 | INC | ra <- ra + 1 | 5 |
| 01000 | DEC | ra <- ra - 1 | 5 |
| 01001 | AND | ra <- ra & rb | 5 |
| 01010 | OR | ra <- ra \| rb | 5 |
| 01011 | XOR | ra <- ra ^ rb | 5 |
| 01100 | NOT | ra <- ~ra | 5 |
| 01101 | ADD | ra <- ra + rb | 5 |
| 01110 | SUB | ra <- ra - rb | 5 |
| 01111 | ZERO | ra <- 0 | 5 |
| 10000 | PORT0 | P0 <- ra[7:0] | 3 |
| 10001 | BLT | if ra < rb: PC <- rt | 4 / 5 taken |
| 10010 | BNEQ | if ra != rb: PC <- rt | 4 / 5 taken |
| 10011 | PORT1 | ra <- P1 (zero-extended) | 4 |
| 10100 | BGT | if ra > rb: PC <- rt | 4 / 5 taken |
| 10110 | BCH | PC <- ra | 3 |
| 10111 | BEQ | if ra == rb: PC <- rt | 4 / 5 taken |
| 11000 | B7S | 7segReg <- ra[3:0] | 3 |
| 11001 | BLTE | if ra <= rb: PC <- rt | 4 / 5 taken |
| 11010 | SHL | ra <- ra << 1 | 5 |
| 11011 | SHR | ra <- ra >> 1 (zero fill) | 5 |
| 11100 | ROR | rotate ra right by 1 | 5 |
| 11101 | ROL | rotate ra left by 1 | 5 |
| 11110 | UARTS | send ra[7:0]; ra <- last received byte | 4 + wait |

The opcode values and mnemonics are the original's. The field layout and the
operand roles are this design's. Opcode 10101 and 11111 are unassigned and
execute as NOP. Arithmetic is modulo 2^16 and sets no flags. All compares are
unsigned. The PC is 7 bits wide, so branch targets use the low 7 bits of imm8
or of the target register. `pec_pkg::mk_i` and `pec_pkg::mk_r` assemble the two
forms.

## Control unit and instruction timing

`pec_control` is a state machine written as two processes. A combinational
block reads the state, InstReg, `compin` and the UART status, and produces
every control and the next state. A clocked block holds the state. Reset is
active high and asynchronous, and forces state `S_RESET1`.

```
RESET1 -> RESET2 (PC <- 0) -> FETCH1 -> FETCH2 -> DECODE -> [EXEC1 -> [EXEC2]] -> FETCH1
```

* **FETCH1**: the PC goes onto the bus and into Address Reg.
* **FETCH2**: the ROM word goes onto the bus and into InstReg, and the PC increments.
* **DECODE** finishes one-step instructions. These are LOADI, BI, BCH, PORT0,
  B7S, NOP, and BGTI when it is not taken. For the others, DECODE does the
  first step: it loads OpReg with ra (or rb for MOVE), loads the RAM address
  from imm8, or samples port 1.
* **EXEC1** does one of several things:
  * it computes ALU → shifter → outReg (b comes from rb over the bus);
  * it moves RAM or port 1 into ra, or ra into RAM;
  * it evaluates a compare-branch (OpReg = ra against the bus = rb);
  * it makes the jump of a taken BGTI.
* **EXEC2**: outReg is written back to ra, or a taken compare-branch loads the
  PC from rt.

The first instruction is fetched three cycles after reset is released, from
ROM address 0. UARTS waits in DECODE for as long as the transmitter is still
sending the previous byte.

## Clock gating

This is the core idea of the design, and the part that needs the most care.

There are eight clock domains, each behind a `pec_clock_gate`. They are
*alu* (OpReg and outReg), *port0*, *port1*, *ram* (Ram Address Reg and the RAM
write port), *regfile*, *rom* (PC, Address Reg and InstReg), *uart* and
*seg7*. Only the control unit's state register runs on the free clock. The
`clkgat_t` struct carries the eight gating signals and is also brought out of
the core and the top, so that a testbench or a board can watch it.

**The rule.** The control unit computes a domain's gating signal in the same
combinational process as the controls. The signal is high in a cycle exactly
when some register of that domain loads at the end of that cycle:

| Domain | Enabled when |
|---|---|
| regfile | `regwr` |
| alu | `opregwr` or `outregwr` |
| rom | `addressregwr`, `instrwr`, `pcwr` or the PC clear of RESET2 |
| ram | `ramaddrwr` or `ramwr` |
| port0, port1, seg7 | `p0wr`, `p1wr`, `s7segsel` |
| uart | `uartsel`, or the transmitter or receiver busy, or rx low |

An ADD therefore clocks *rom* twice, *alu* twice and *regfile* once in its
five cycles, and nothing else. A NOP clocks only *rom*. The testbenches count
the gated cycles of each domain. With the demonstration program, which spends
most of its time waiting for the UART, every domain except *uart* and *rom* is
gated off in more than 99 % of the cycles. *rom* is gated off in about 90 %.

**The gate.** The clock and the gating signal go through an AND gate. In front
of the AND, a latch that is transparent while the clock is low holds the
enable. The control signals come from the state register, so they change
shortly after a rising edge, while the clock is high. The latch keeps such a
change from cutting short the current high phase or adding a pulse. The
enable must settle before the next rising edge, which is an ordinary
single-cycle path.

**Registers inside a domain** still have their own load enables. For example,
in FETCH1 the *rom* domain is clocked so that Address Reg can load, but the
PC and InstReg must hold. Gating saves the clock power of whole idle domains.
The enables pick the register within a domain.

**The UART is the exception.** It has to count bit times and see a start bit
at any moment, so its domain stays on while it sends or receives. It also
stays on while the rx pin is low, because a start bit may be arriving. The rx
pin therefore feeds the gate's enable without being synchronised first. At
worst the first cycle of a start bit is lost, which is within the half-bit
tolerance of the receiver's mid-bit sampling.

**Simulation note.** The gated clocks are derived combinationally from `clk`.
Flip-flops on a gated clock sample, at the same edge, data produced by
flip-flops on `clk` or on other gated clocks. This is correct under the
standard SystemVerilog scheduling semantics that Verilator 5 implements. The
core testbench checks it against a reference model cycle by cycle.

## Clocker

`pec_clocker` models the programmable oscillator. It is a behavioural model
and is not synthesizable. A 4-bit control word sits in the register `r_osc`,
loaded from `rosc_din` on a rising edge of `rosc_wr`. It sets the period,
linearly from 1/44 MHz = 22.73 ns at word 0 to 1/134 MHz = 7.46 ns at word 15.
When `start_stop` is low the clock is held low. The original oscillator is a
hand-built ring of NOR gates and divider flip-flops. Its measured period falls
almost linearly with the control word, and the straight line here stands in
for that curve. For an FPGA or ASIC, replace `pec_clocker` with the target's
oscillator or PLL and keep `pec_core` unchanged.

## Memories and I/O

* **ROM**: 128 words of 16 bits. Its contents are the parameter
  `ROM_IMAGE` (type `pec_pkg::rom_image_t`, word i at index i), so the
  program is synthesized as a constant table. The default is
  `pec_pkg::demo_rom()`. The demonstration program
  counts 0..9. For each value it writes port 0 and the 7-segment digit, stores
  the value to RAM word 0x20, loads it back and sends it over the UART. It then
  loops at address 12.
* **RAM**: 1024 words of 16 bits. Writes are synchronous and reads are
  asynchronous. LOAD and STORE carry an 8-bit address, so programs reach
  words 0..255.
* **Port 0** drives 8 pins from Port0R. **Port 1** samples its 8 pins when
  PORT1 executes.
* **7-segment**: `seg = {g,f,e,d,c,b,a}`, active high. Codes 10 to 15 blank the
  digit.
* **UART**: 1 start bit, 8 data bits LSB first, 1 stop bit. A bit lasts
  `UART_CLKS_PER_BIT` clocks (default 868, which is 115200 baud at 100 MHz).
  The receiver synchronises rx and samples in mid-bit. It drops a frame whose
  start bit does not last half a bit or whose stop bit is 0.

## Parameters

`pec_top` and `pec_core` take `ROM_WORDS` (128), `RAM_WORDS` (1024),
`PORT_W` (8), `UART_CLKS_PER_BIT` (868) and `ROM_IMAGE`. The instruction format
limits the PC to 7 bits when ROM_WORDS is 128 and the RAM address field to 8
bits. Enlarging the memories beyond 256 words gives no extra reach without a
new instruction format.

## Where this design departs from or fills in the original

The following are the original's:

* the block set;
* the 16-bit word, the 8 registers, the 256-byte ROM and the 8-pin ports;
* the opcode table;
* the two-process control unit with the reset state `reset1`;
* the signal names ALUsel(3:0), shfsel(4:0), compsel(4:0) and Regsel(2:0), and
  the eight `Clkgat*` signals;
* clock gating by ANDing the clock with a control-unit signal;
* the 4-bit `r_osc` control word and the 44 to 134 MHz range.

One of the original's simulation traces is followed as well: an INC
instruction word, 16'h3800, drives ALUsel = 7.

The following are this design's choices:

* **Instruction fields and operand roles.** These include BGTI testing its
  register against zero, register-held targets for the compare-branches, and
  UARTS exchanging a byte.
* **Micro-sequence and timing.** The 3 to 5 cycles per instruction come from
  this design.
* **Bus structure.** The original lists separate `*rd` strobes. Here they are
  folded into one bus-source code.
* **Select codes** for the ALU, shifter and comparator. Compares are unsigned.
* **Enable latch in the clock gate.**
* **UART frame, baud rate and clock-gating condition.**
* **7-segment polarity.**
* **Asynchronous reset** of the holding registers. The register file and RAM
  are not reset.
* **Linear oscillator law** and the `start_stop` polarity.
* **RAM size.** The original gives 1K x 16 in its text, 1 KB in its summary
  table and 128 x 16 in its block diagram. The text's 1K x 16 is used. Only
  256 words are reachable (see above).
* **Port width.** The block diagram shows 8-pin ports, while a top-level
  simulation trace shows 16-bit ports. The 8 pins are used.

The original also mentions an external interrupt that wakes the controller
from an idle mode. No instruction enters an idle mode and no interrupt
interface is described, so neither exists here. Several control signals of
the original's list (`regrdwr`, `romsel`, `instregsel`, `addressregrd`) have no
stated meaning and are not used. The original reports power numbers from an
FPGA vendor's estimator (273 mW without gating, 182 mW with it). This RTL does
not reproduce or check them. The testbenches report gated cycles per domain
instead.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_pec_core` runs the core against an instruction-level reference model
  written in the testbench, in lockstep. At every return to FETCH1 it compares
  the registers, PC, port 0, segments and the cycle count of the instruction,
  and at the end of a program it compares the RAM. It decodes the bytes on tx
  and feeds a byte into rx. It runs a directed program that uses every opcode
  with branches both ways, then ten random programs. It then checks that every
  opcode, taken and untaken branches, the UARTS stall, and both the gated and
  the running state of all eight clock domains occurred.
* `tb_pec_top` is the whole chip at default parameters. It measures the clock
  at control words 0 and 15, runs the demonstration program with the UART at
  868 clocks per bit, stops and restarts the oscillator midway, and checks
  ports, segments, UART bytes and the final state.
* `tb_pec_control` checks the control unit alone, opcode by opcode. It checks
  the cycle counts, the strobes and selects, the reset sequence, the UARTS
  stall and the exact clock-gating rule. It also runs the INC word 16'h3800
  from the original's trace and expects ALUsel = 7.
* The remaining testbenches check the leaf blocks against expressions or
  shadow copies written in the testbench.

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/pec_pkg.sv tb/tb_pec_core.sv \
          --top-module tb_pec_core -o sim && ./obj_dir/sim
```

To run a program of your own, build a `rom_image_t` with `mk_i`/`mk_r` in a
function like `demo_rom()` and pass it as `ROM_IMAGE`, or write `u_rom.mem`
from a testbench, as `tb_pec_core` does. Simulators with two-state logic start the register file and RAM at
arbitrary values. Initialise in software whatever a program reads.
