# A 64-channel programmable pattern generator for experiment timing

Atomic physics experiments need one master timing source. It switches lasers,
shutters, synthesisers and cameras in a fixed, repeatable order, with timing
that is the same on every run. This design is that source. It replays a list
of instructions. Each instruction sets 64 TTL output lines and says how many
clock cycles to hold them. At a 100 MHz clock one count is 10 ns. The
instruction set follows the PulseBlaster's: continue, stop, loop, subroutine
call and return, branch, long delay, and wait for a hardware trigger. Host
software that can drive a PulseBlaster can drive this design with few changes.

The design is split across a processor and programmable logic on one chip.
The processor holds the whole program in its SDRAM. The logic executes the
program from a small on-chip RAM. A *ping-pong* controller keeps that RAM
filled: the RAM is two banks, and while the state machine executes one bank,
the controller loads the next part of the program into the other. A program
can therefore be far longer than the on-chip RAM. The SDRAM area for programs
holds 8,192,000 instructions. The on-chip RAM holds 32,768.

This RTL covers the programmable-logic side. The processor, its DMA engine,
the SDRAM, the PLL and the analog board circuits are outside it. The top
module brings out ports where they connect.

## Block structure

```
                  ps_clk domain                    |   sm_clk domain (100 MHz)
                                                   |
 AXI4-Lite ──> axil_regs ──start/abort──────── pulse_sync ──> pattern_sm ──> ttl_out[63:0]
 (processor)      │  TRIG_SEL ─────────────────── sync_2ff ──>    │  ^
 EMIO start ──────┘ (edge) ─────────────────────────^             │  │ trig
                  │ DMA_BASE, NUM_CHUNKS                          │  └── trigger_in <── trig_in[3:0]
                  v                                               │
 DMA cmd <── pingpong_ctrl <── sync_2ff <── bank bit (pc[14]) ────┤
 DMA data ──>     │ write port                          read port │
                  └─────────────> instr_ram 32768 x 128 <─────────┘
```

| Module | Role |
|---|---|
| `psoc_pattern_top` | Top of the programmable logic. Wires the blocks and the clock-domain crossings. |
| `pattern_sm` | Executes instructions and drives the 64 outputs. |
| `instr_ram` | 32768 x 128-bit dual-clock RAM, as Bank 0 (addresses 0–16383) and Bank 1 (16384–32767). |
| `pingpong_ctrl` | Refills the bank the state machine has left, from SDRAM, through the DMA channel. |
| `axil_regs` | Processor-visible registers: commands, trigger select, program location and length, status. |
| `trigger_in` | Synchronises the four trigger inputs, selects one and detects its rising edge. |
| `psoc_pkg` | Instruction layout (`instr_t`) and opcodes (`opcode_e`). |
| `sync_2ff`, `pulse_sync` | Two-flop level synchroniser and toggle pulse synchroniser. |

There are two clock domains. `ps_clk` is the processor-side clock. The
registers, the ping-pong controller, the DMA ports and the RAM write port run
on it. `sm_clk` clocks the state machine, the trigger logic and the outputs.
On the board it can come from a PLL locked to an external reference, so the
output timing need not be tied to the processor clock. The RAM is the only
wide path between the domains. Everything else that crosses is single bits:
command pulses, the trigger select, three status bits, and the bank bit of the
state machine's address.

## The instruction word

Each instruction is one 128-bit word. `psoc_pkg::instr_t` is a packed struct with
these fields:

| Bits | Field | Meaning |
|---|---|---|
| 127:120 | reserved | unused |
| 119:56 | flags | output levels, bit 56 → `ttl_out[0]` … bit 119 → `ttl_out[63]` |
| 55:52 | opcode | see below |
| 51:32 | data | loop count, jump address or delay multiplier |
| 31:0 | delay | duration in `sm_clk` cycles |

A jump target in `data` is a **RAM address** (0–32767), not an SDRAM
position. The host must translate program positions to RAM addresses. This is
simple because the program streams through the RAM in order: SDRAM word *k*
sits at RAM address *k* mod 32768.

## Instruction set and exact timing

This is the part to understand before using the design. Every instruction
holds its flags on the outputs for exactly `delay` cycles. LONG DELAY holds
them for `delay × data` cycles. WAIT holds them until a trigger arrives and
then for `delay` more cycles. The state machine adds no fetch cycles between
instructions, so a sequence of 1-cycle instructions changes the outputs on
every clock.

| Op | Name | data | What happens after the instruction's time |
|---|---|---|---|
| 0 | CONTINUE | – | next address |
| 1 | STOP | – | halts; the flags stay on the outputs |
| 2 | LOOP | passes (≥ 1) | first instruction of a loop body. On first entry it loads the loop counter. Then next address. |
| 3 | END LOOP | address of the LOOP | last instruction of the body. Jumps back while passes remain. Otherwise next address. |
| 4 | JSR | subroutine address | saves next address, jumps |
| 5 | RTS | – | jumps to the saved address |
| 6 | BRANCH | target address | jumps |
| 7 | LONG DELAY | multiplier | lasts `delay × data` cycles, then next address |
| 8 | WAIT | – | outputs its flags at once, waits for a trigger pulse, counts `delay` from the trigger cycle, then next address |

**How the state machine avoids fetch gaps.** The RAM read is registered and
has a read enable. The instruction being executed is kept in the RAM's output
register, because the read enable stays low while the instruction runs. In
the last cycle of the instruction the machine computes the next address and
issues the read. The next address depends on the opcode, the loop counter, the
return register and, for WAIT, the trigger, all in the same cycle. The next
instruction is on the RAM output one cycle later. The flags go through one
output register. Every instruction therefore reaches `ttl_out` one cycle
after it starts executing. This offset is the same for all instructions and
does not change any duration.

**Start latency.** A start command is a write to CTRL or a rising edge on the
EMIO line. It first crosses into `sm_clk` in 2–3 cycles. After that, the first
instruction's flags appear on `ttl_out` two `sm_clk` edges later: one edge
for the RAM read, one for the output register.

**Loops.** A loop is a body of instructions that starts with LOOP and ends with
END LOOP. With `data = N` the body runs N times. LOOP loads the counter only
when no loop is active, so jumping back to it does not reload the counter.
There is one counter, so loops cannot be nested. `data = 0` is taken as 1.

**Subroutines.** There is one return register. A subroutine must not call
another subroutine.

**Zero values.** `delay = 0` executes as 1 cycle. LONG DELAY with `data` 0 or
1 lasts `delay` cycles. Opcodes 9–15 execute as CONTINUE.

**WAIT and triggers.** `trigger_in` brings the four board inputs into `sm_clk`
with two flops each. It selects one input with `TRIG_SEL` and gives a
one-cycle pulse on each rising edge. The pulse comes 3 cycles after the input
rises. A WAIT instruction sets its flags as soon as it starts, then waits for
the pulse. If `delay = d`, the next instruction's flags appear `d + 1` edges
after the pulse cycle. The extra edge is the output register. A pulse that
arrives while no WAIT is executing is ignored.

**STOP and abort.** After STOP the outputs keep the STOP instruction's flags.
A new start command runs the program again from address 0. An abort command
returns the machine to idle at once, with the outputs unchanged.

## The ping-pong cache

The state machine's address counter runs through Bank 0 and Bank 1 and then
wraps from 32767 back to 0. The ping-pong controller makes sure that each
bank holds the right part of the program when the state machine gets there.
The controller has one register, `last_bank`. It also watches the bank bit,
address bit 14 of the executing instruction, which it receives through a
two-flop synchroniser.

1. Start: the controller loads chunk 0 (SDRAM words 0–16383) into Bank 0 and
   sets `last_bank = 1`.
2. The controller compares the state machine's bank with `last_bank`. While they are
   equal, it does nothing.
3. When they differ, the state machine has moved into the other bank. The
   controller loads the next chunk into the bank it left, which is the bank
   named by `last_bank`. Then it sets `last_bank` to the bank now in use and
   goes back to step 2.

`last_bank` starts at 1. So as soon as the state machine runs in Bank 0,
chunk 1 is loaded into Bank 1. After that, each bank change refills the bank
just left with the next chunk: chunk 2 into Bank 0, chunk 3 into Bank 1, and
so on. Loading stops after `NUM_CHUNKS` chunks, and the controller reports
*done*. Each load is one DMA command: byte address `DMA_BASE + chunk ×
262144`, length 262144 bytes (16384 words of 16 bytes). The controller takes
one word per `ps_clk` cycle and writes it into the RAM in the same cycle.

This scheme puts three rules on the program, and the host must follow them.

- **Control flow must stay inside one bank.** A jump back into a bank that
  has already been refilled would run newer instructions. A LOOP must be in
  the same bank as its END LOOP, and a JSR in the same bank as its subroutine.
  For a loop written as LOOP immediately followed by END LOOP, or as LOOP,
  LONG DELAY, END LOOP, the host compiler handles this. If the LOOP would
  land on the last slot of a bank, or on the second-to-last slot with a LONG
  DELAY after it, the compiler pads with CONTINUE instructions until the LOOP
  starts the next bank. It then shortens the LOOP's delay by the padding time.
  The system testbench builds its program with this rule.
- **The program is whole chunks.** Every load moves a full bank. The host
  pads the last chunk, and the program must end with STOP.
- **The refill must finish before the state machine reaches the refilled
  bank.** Nothing in the hardware checks this. Refilling a bank takes about
  16384 `ps_clk` cycles plus the DMA latency and any gaps in the DMA stream.
  The state machine needs the summed durations of a bank's instructions to
  cross it. The testbenches use `ps_clk` = 125 MHz and an average of 2.5
  cycles per instruction at 100 MHz. A program of mostly 1-cycle instructions
  would outrun the refill.

## Registers and operating sequence

The AXI4-Lite slave has 32-bit registers at these byte addresses. Every
response is OKAY. Unmapped addresses read as 0.

| Addr | Name | Access | Content |
|---|---|---|---|
| 0x00 | CTRL | W | write 1 to: bit0 start state machine, bit1 abort it, bit2 start ping-pong, bit3 abort it |
| 0x04 | TRIG_SEL | RW | bits 1:0, the trigger input WAIT uses |
| 0x08 | DMA_BASE | RW | SDRAM byte address of program word 0 |
| 0x0C | NUM_CHUNKS | RW | program length in chunks of 16384 instructions |
| 0x10 | STATUS | R | bit0 running, bit1 waiting for trigger, bit2 stopped, bit3 loading, bit4 all chunks loaded, bit5 `last_bank` |
| 0x14 | CHUNKS_LOADED | R | chunks loaded so far |

To run a program:

1. Put the program in SDRAM, padded to whole chunks.
2. Write DMA_BASE, NUM_CHUNKS and TRIG_SEL.
3. Write CTRL = 0x4 to start the ping-pong controller.
4. Poll CHUNKS_LOADED until it is at least 1.
5. Start the state machine: write CTRL = 0x1, or raise the EMIO start line.
6. Poll STATUS for stopped.

The DMA port at the top is a command handshake (`dma_cmd_*`: valid/ready,
byte address, byte length) plus a 128-bit valid/ready data stream
(`dma_s_*`). A real DMA engine needs a small adapter to these ports.

Idle outputs:

- `s_axi_bresp` and `s_axi_rresp` are always OKAY.
- `dma_cmd_len` is the constant chunk size.

## Where this RTL follows the published design and where it chooses

Taken from the published design:

- The 128-bit word layout and the opcode numbers.
- The nine instructions and what each does.
- Row-by-row execution, and no nested loops.
- The 32768 x 128 dual-clock RAM split into two banks of 16384.
- The ping-pong algorithm with `last_bank` starting at 1.
- The SDRAM program space of 8,192,000 instructions.
- Four trigger inputs and 64 outputs.
- A state machine clocked at 100 MHz, optionally from a PLL.
- Configuration registers reached over AXI-lite, and EMIO access.
- The host-side padding rule for loops at bank boundaries.

Chosen here, where the source says nothing:

- All cycle timing. This includes the registered output, the RAM read with
  enable, and the next address being chosen in the instruction's last cycle.
- Delay 0 and count 0 taken as 1. Opcodes 9–15 act as CONTINUE.
- WAIT: it waits first, then counts its delay from the trigger. The trigger
  acts on the rising edge of the selected input.
- A single return register, so no nested subroutines.
- The register map, the command pulses and the STATUS bits.
- The EMIO line used only as a start line.
- The DMA handshake. Whole-bank transfers. Stopping after `NUM_CHUNKS`.
- All synchronisers.
- Reset: active low and asynchronous in each domain. The outputs reset to 0.
  The RAM contents are not reset.

Two inconsistencies in the source material:

- One figure caption gives the bank size as 16834. The text and the address
  labels give 16384 = 2^14. This RTL uses 16384.
- The flowchart of the host compiler's padding rule tests
  `mem_addr % 2^14 > 2^14 - 2` for the LOOP-followed-by-LONG-DELAY case.
  Taken literally, this would leave a LOOP on the second-to-last slot in
  place. The text says that slot must also be moved. The testbench follows
  the text.

Not provided:

- The 1 ns mode using I/O serialisers. It was only proposed as an extension.
- Any check that a refill finished in time.
- Any reporting of SDRAM errors.

## Parameters

| Parameter | Where | Default | Meaning |
|---|---|---|---|
| `AW` | `psoc_pattern_top`, `pattern_sm`, `instr_ram`, `pingpong_ctrl` | 15 | RAM address width. Banks are 2^(AW-1) words. |
| `W` | `instr_ram`, `pingpong_ctrl` | 128 | word width (must match `instr_t`) |
| `N_IN` | `trigger_in` | 4 | trigger inputs |

All defaults are full size. The whole design elaborates and simulates at
these defaults.

## Testbenches and how to run them

Each testbench prints `TB_RESULT checks=N failures=M` and ends.

| Testbench | What it checks |
|---|---|
| `tb_pattern_sm` | Runs a directed program and a random program. Every output value and its duration must match a reference interpreter; the program covers loops, subroutines, branches, long delays, zero delays, unknown opcodes and STOP. Also: start latency, WAIT with the trigger-to-output count, a trigger already present when WAIT starts, and abort. RAM reduced to 256 words. |
| `tb_instr_ram` | Writes and reads on two unrelated clocks. Checks the one-cycle read, that the output holds while the read enable is low, and that a write with enable low does not land. 64 words. |
| `tb_pingpong_ctrl` | Checks the bank algorithm step by step against the DMA model: load order, `last_bank`, no transfer while the state machine stays in a bank, DMA addresses, transfer rate, stop after NUM_CHUNKS, abort. Banks reduced to 16 words. |
| `tb_axil_regs` | Writes with address and data in every order, held responses, byte strobes, command pulses, reads. |
| `tb_trigger_in` | Input select, one pulse per edge, 3-cycle latency. |
| `tb_psoc_pattern_top` | Runs the full-size design end to end: a 4-chunk (65,536-word) program through AXI, the ping-pong controller, DMA with random stalls, and a trigger. Every output value and its duration are compared with a reference. It also counts that every opcode, a bank refill, an address wrap, a loop repeat, a WAIT released by a trigger, a padded loop at a bank boundary, the EMIO start and the status reads each happened. |
| `tb_long_program` | A program filling the whole 8,192,000-word SDRAM space (500 chunks), generated on the fly. Every output value and duration is checked. About 25 s of simulation. |

`dma_sdram_model` and `dma_gen_model` are behavioural stand-ins for the DMA
engine and the SDRAM. The first reads an array, which the testbench fills.
The second computes each word with the formula in `long_prog_pkg`.

With Verilator 5, from the directory that holds `rtl/` and `tb/`, run:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/psoc_pkg.sv tb/tb_psoc_pattern_top.sv --top-module tb_psoc_pattern_top
./obj_dir/Vtb_psoc_pattern_top
```

Replace the testbench name to run another one. `-I` lets Verilator find each
module in the file of the same name. Packages must be named on the command
line first: `rtl/psoc_pkg.sv`, plus `tb/long_prog_pkg.sv` for
`tb_long_program`. The simulation has no X state: the testbenches reset or
initialise everything they read.

For synthesis, `rtl/` is plain SystemVerilog-2017. `instr_ram` is written to
be inferred as block RAM: one write port, one registered read port with
enable, two clocks. The concurrent assertions in `pattern_sm`,
`pingpong_ctrl` and `axil_regs` check handshake rules in simulation.
