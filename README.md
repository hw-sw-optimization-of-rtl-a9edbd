# MAUPITI digital block: a RISC-V sensor controller with INT8/INT4 dot-product instructions

MAUPITI is a smart thermal sensor that counts people without ever producing an
image in which anyone could be recognised. A 16x16 array of thermal MOSFET
(TMOS) pixels sees only body heat. A small on-chip microcontroller runs a
quantised neural network directly on each frame and reports only the count.
The chip runs at 20 MHz and takes 10 frames per second. Energy per inference
is what matters, so the networks are quantised layer by layer to 8 or 4 bits.
The processor therefore has one cheap extension: a single-cycle SIMD
*sum of dot products* (SDOTP) over four signed 8-bit or eight signed 4-bit
lanes.

This repository holds synthesizable SystemVerilog for the chip's digital
part:

- the customised two-stage RV32IMC core with the SDOTP unit;
- boot ROM, 16 KB instruction RAM and 16 KB data RAM, with their memory
  interfaces;
- the 80-byte OTP (as a behavioural model);
- the calibration register bank;
- the TMOS array readout and frame buffer;
- an instruction tracer (simulation only).

Self-checking testbenches cover every module and the whole block.

```
                       +-------------------------------- maupiti_top ------------------------------+
 load_* (host) ------->|--+-------------------------+                                             |
                       |  |                         |                                             |
                       |  v                         v                                             |
                       | inst_mem_if <----+    data_mem_if ---> sram (16 KB data RAM)  0x0002_0000 |
                       |   |     |        |      |  |  |  +---> calib_regs             0x0003_0000 |--> calib_o
                       |   v     v        |      |  |  +------> otp (80 B)             0x0003_1000 |<-- otp_prog_*
                       | boot_rom sram    |      |  +---------> tmos_readout           0x0003_2000 |<-> afe_*
                       | 0x0      16 KB   |      |                 (frame buffer)                  |--> frame_ready_o
                       |          0x0001_0000    |                                                 |
                       |                  |      |                                                 |
                       |            instr port  data port                                          |
                       |                +--------+--------+                                        |
                       |                |   maupiti_core  |  IF: prefetch_buffer, compressed_decoder|
                       |                |                 |  ID/EX: decoder, register_file (3R1W),  |
                       |                |                 |  alu + sdotp_unit, multdiv, lsu, csr,   |
                       |                +-----------------+  controller, tracer                     |
                       +---------------------------------------------------------------------------+
```

## The SDOTP instructions

### What they compute

```
sdotp8 rd, rs1, rs2 :  rd <- rd + sum_{i=0..3} sext(rs1[8i+7:8i]) * sext(rs2[8i+7:8i])
sdotp4 rd, rs1, rs2 :  rd <- rd + sum_{i=0..7} sext(rs1[4i+3:4i]) * sext(rs2[4i+3:4i])
```

- All lanes are signed. The sum wraps modulo 2^32.
- The destination register is both the accumulator input and the result.
- There is no separate plain dot product: `sdotp` with `rd` cleared first does
  that job.
- There are deliberately no unsigned, mixed 8x4 or 2-bit variants, and no
  fused load-and-MAC.
- Operands come only from registers, so a kernel loads its activation and
  weight words with ordinary `lw` instructions before each `sdotp`.

These limits keep the core area increase small. They are also why a network
layer must use the same precision for its weights and its activations.

### Encoding

The encoding is this design's own, because the original encoding is not
published. Both instructions are R-type on the RISC-V *custom-0* major
opcode:

| field | bits | sdotp8 | sdotp4 |
|---|---|---|---|
| funct7 | 31:25 | 0000000 | 0000000 |
| rs2 | 24:20 | rs2 | rs2 |
| rs1 | 19:15 | rs1 | rs1 |
| funct3 | 14:12 | 000 | 001 |
| rd | 11:7 | rd | rd |
| opcode | 6:0 | 0001011 | 0001011 |

An assembler without these mnemonics can emit them with
`.insn r 0x0b, 0, 0, rd, rs1, rs2` (sdotp8) and
`.insn r 0x0b, 1, 0, rd, rs1, rs2` (sdotp4).

### How the core executes them

Three units of an ordinary RV32IMC core change:

1. **Decoder** (`decoder.sv`). It recognises the two encodings. For them it
   asks for a third source register (`use_rs3`), names the ALU operation and
   enables the write-back of `rd`.
2. **Register file** (`register_file.sv`). It gains a third combinational
   read port, RdC, addressed by `rd`. That read port is the only real cost of
   using the destination as accumulator.
3. **ALU** (`alu.sv`). It gains a third operand, OpC, fed from RdC, and holds
   the new `sdotp_unit`.

The SDOTP unit is purely combinational. It has two independent multiplier
sets:

- four 8x8 signed multipliers;
- eight 4x4 signed multipliers.

Each set has its own adder tree, which also adds the 32-bit accumulator. The
mode bit only selects which tree drives the result. Sharing one set of
multipliers would save area, but the lane-splitting muxes would then sit on
the core's critical path. Replicating them keeps SDOTP a one-cycle ALU
operation: a sequence of `sdotp` instructions retires one per clock.

Packing rule for data: INT8 lane *i* is byte *i* of the word (little-endian).
INT4 lane *i* is nibble *i*, so element 0 sits in bits 3:0. Activations and
weights must be packed this way in memory so that one `lw` fills four or
eight lanes.

## The core

`maupiti_core` has two stages, like the small Ibex configuration it follows.

**Fetch (IF).** The stage has three parts:

- `prefetch_buffer` requests aligned 32-bit words ahead of execution. It keeps
  up to three words, counting those still in flight, so a memory with one
  cycle of latency streams one word per cycle.
- The buffer's aligner presents an instruction that may start at any
  halfword. A 32-bit instruction may straddle two words.
- `compressed_decoder` expands RV32C encodings. A pipeline register then hands
  the ID/EX stage one 32-bit instruction with its PC.

On a redirect the buffer empties and drops every response still in flight.

**Decode/execute (ID/EX).** In one cycle the stage:

- decodes the instruction and reads up to three registers;
- selects the operands: OpA is a register, the PC or zero; OpB is a register
  or an immediate;
- executes in one of the ALU, `multdiv`, `lsu` or `csr`;
- writes back.

`controller` decides each cycle whether the instruction retires, waits, or
redirects the PC to a branch or jump target, to `mtvec` on a trap, or to
`mepc` on `mret`.

Cycle costs, with memories that grant at once and answer one cycle later:

| instruction class | cycles in ID/EX |
|---|---|
| ALU, SDOTP, CSR, MUL/MULH* | 1 |
| load, store | 2 |
| DIV/DIVU/REM/REMU | 34 (radix-2 restoring divider) |
| taken branch, jump, trap, mret | 1, plus the refetch delay: the next instruction arrives 3 cycles later |

Machine mode only, with no interrupts and no debug mode. Exceptions are:

- illegal instruction (cause 2);
- ecall (11);
- ebreak (3);
- misaligned load (4) or store (6). Misaligned accesses trap rather than
  being split into two accesses.

`wfi` and `fence` execute as no-ops.

The CSR set is a minimal machine-mode one:

- `mstatus` (MIE and MPIE), `misa`, `mtvec` (direct mode), `mscratch`,
  `mepc`, `mcause`, `mtval`, `mhartid`;
- 64-bit `mcycle` and `minstret`, with their read-only user aliases.

`mtvec` resets to the start of the instruction RAM.

Both memory ports use a request/grant handshake with in-order responses
flagged by `rvalid`, the same scheme as the Ibex core's memory ports.

## Memories, address map and start-up

| region | base | size | reached through |
|---|---|---|---|
| boot ROM | `0x0000_0000` | 64 words | instruction port |
| instruction RAM | `0x0001_0000` | 16 KB | instruction port and load port |
| data RAM | `0x0002_0000` | 16 KB | data port and load port |
| calibration registers | `0x0003_0000` | 16 x 32 bit | data port |
| OTP | `0x0003_1000` | 80 B (20 words), read only | data port |
| frame buffer and readout control | `0x0003_2000` | 128 words + status | data port |

Every slave answers one cycle after a request. An address outside these
regions returns zero. An instruction fetch from such an address therefore
decodes as an illegal instruction and traps.

The serial host interfaces (I2C, SPI) are not part of this RTL. Their
parallel side appears on the top as a **write-only load port** (`load_*`),
which can write words into either RAM. The load port has priority: while it
writes a RAM, the core's request to the memory interface that owns that RAM
is not granted and simply waits.

A typical start-up:

1. The host holds `rst_ni` low and writes the application into the
   instruction RAM. The RAM array is not cleared by reset.
2. The host releases reset. The core fetches from address 0. The boot ROM
   holds `lui t0, 0x10` and `jalr x0, 0(t0)`, which jump to the instruction
   RAM.
3. The application may keep receiving data, such as weights, through the load
   port while it runs.

The OTP (`otp.sv`) is a behavioural model of a fuse macro:

- blank bits read 0;
- programming through `otp_prog_*` can only set bits;
- the core reads it as 20 little-endian words;
- bus writes are ignored.

The calibration registers (`calib_regs.sv`) are 16 generic read/write words
with byte enables. All of them are brought out on `calib_o`, towards the
analog calibration inputs.

## TMOS array readout

The array has eight analog front-end chains. Each chain converts one row of
16 pixels, so a 16-row frame takes two steps. `tmos_readout` sequences them:

1. Software enables the readout. From then on a frame starts every
   `FRAME_CYCLES` clocks: 2,000,000, which gives 10 frames/s at 20 MHz.
2. For step *s* (0, then 1) the block pulses `afe_start_o` with `afe_step_o =
   s`. It then waits for `afe_done_i` and stores the eight rows on
   `afe_data_i`. Chain *c* delivers row `8*s + c`.
3. After step 1 it sets `frame_ready_o` and increments a 16-bit frame
   counter.

A frame period that expires while the previous frame is still being read is
skipped.

Bus view, as offsets from `0x0003_2000`:

- `0x000-0x1FC`: 128 words. Word *k* holds pixel `2k` in bits 15:0 and pixel
  `2k+1` in bits 31:16, with pixels in row-major order.
- `0x200` status/control:
  - read: `{frame_count[15:0], 13'b0, busy, enable, frame_ready}`;
  - write: bit 0 sets `enable`; writing 1 to bit 1 clears `frame_ready`.

The frame-buffer writes overwrite pixels in place. A program that needs a
stable frame should copy the pixels out, or finish with them, before the next
period ends.

## What is outside the RTL

These parts are represented only by ports:

- the TMOS pixels and their analog front ends (`afe_*`);
- the LDO;
- clock generation (`clk_i`: 20 MHz) and reset circuitry (`rst_ni`);
- the analog calibration block (`calib_o`);
- the I2C/SPI interfaces (`load_*`).

The front-end handshake (start pulse, step number, done pulse, rows of 16-bit
pixels) is this design's own definition.

## Where this RTL departs from, or goes beyond, the published description

The published description gives the following:

- the SDOTP semantics and the structure of its datapath;
- the three modified core units;
- the memory sizes, OTP size and array geometry;
- the two-step acquisition;
- clock and frame rate;
- the list of blocks in the digital part.

Everything below is this design's own choice:

- **SDOTP encoding** (custom-0, funct3 000/001), lane order, and wrap-around
  accumulation.
- **Core internals**:
  - prefetch depth;
  - single-cycle multiplier and 34-cycle divider;
  - misaligned accesses trap;
  - CSR set;
  - no interrupts;
  - operand selection: the published core diagram lists PC, immediate and
    register inputs for the first ALU operand. Here that operand is a
    register, the PC or zero, and CSR immediates go straight to the CSR file.

  The published figures name the Ibex blocks but do not describe them.
- **Address map, boot ROM contents, load port and its priority.** How the
  program reaches the instruction RAM is not published.
- **Readout interface**:
  - which rows form a step;
  - pixel width (16 bit);
  - start/done handshake;
  - frame-buffer packing;
  - status register.
- **Calibration registers**: count (16), width (32 bit) and reset value (0).
  Their meaning is unknown, so they are generic.
- **OTP**: fuse behaviour, programming port and read timing.
- **Tracer**: it prints to the simulation log instead of writing a trace
  file.

The RAMs and the OTP are written as arrays. On silicon they would be macros
whose timing may differ.

## Fitting the published networks

Three deployed networks are reported for this chip. All fit with wide
margins:

| network | code | data | instruction RAM use | data RAM use |
|---|---|---|---|---|
| Top (best accuracy) | 4152 B | 1104 B | 25 % of 16 KB | 7 % of 16 KB |
| -5 % (smallest within 5 % accuracy) | 4052 B | 648 B | 25 % | 4 % |
| Mini (smallest) | 3208 B | 416 B | 20 % | 3 % |

A 16x16 frame of 16-bit pixels occupies the whole 512-byte frame buffer. A
copy of the frame in the data RAM would add 512 B to the data figures above,
which still fits.

The energy figures reported for these networks depend on the silicon and the
compiled kernels. They cannot be checked from RTL.

The exact layer lists of those networks are not available. `tb_maupiti_workload`
therefore runs a representative network of the same kind on the full block:

- input: an 8x8 thermal frame in INT8, the resolution of the public dataset
  the networks were trained on;
- layer 1: a 64-to-16 fully connected layer with INT8 weights (SDOTP8),
  followed by ReLU, a right shift by 13 and a clamp to the 4-bit range 0..7;
- layer 2: a 16-to-4 INT4 layer (SDOTP4) that produces four class scores;
- an argmax over the scores.

The network has 1,088 multiply-accumulates and 1,120 bytes of weights and
input. Its hand-written code is 104 bytes. It takes 3,570 cycles, or 179 µs
at 20 MHz: about 0.3 MAC per cycle, including the loads, loop overhead and
requantisation that the SDOTP instructions leave to ordinary code.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if the
design hangs. `tb/rv_asm_pkg.sv` is a small instruction encoder that the
program-running testbenches use to assemble their code.

| testbench | what it establishes |
|---|---|
| `tb_sdotp_unit` | random and corner operands in both modes against a lane-by-lane reference; result in the same cycle |
| `tb_alu`, `tb_register_file`, `tb_decoder`, `tb_compressed_decoder` | every operation, all three read ports, every encoding class including SDOTP, the RVC expansion table |
| `tb_multdiv` | all eight M operations against reference arithmetic, divide-by-zero and overflow cases, 34-cycle divide |
| `tb_csr`, `tb_controller`, `tb_lsu` | CSR access rules and trap entry/exit; retire/stall/redirect/trap decisions; byte/half/word loads and stores under random grant delays |
| `tb_prefetch_buffer`, `tb_if_stage` | instruction streams with mixed 16/32-bit code at random alignments, random memory stalls and random redirects |
| `tb_maupiti_core` | a program with loops, loads/stores, eight back-to-back SDOTPs (checked to retire on eight consecutive cycles), MUL/DIV/REM, compressed code, an ecall trap and mret, a jal; results compared with values computed in the testbench |
| `tb_sram`, `tb_boot_rom`, `tb_otp`, `tb_calib_regs` | memory contents, byte enables and one-cycle response timing; OTP bits can only be set |
| `tb_inst_mem_if`, `tb_data_mem_if` | address decoding, response steering, unmapped reads, load-port priority |
| `tb_tmos_readout` | shortened frame period: exact period, two steps per frame, row placement, status and clear, stop on disable |
| `tb_maupiti_top` | the whole block at its default parameters (see below) |
| `tb_maupiti_workload` | the two-layer INT8/INT4 network above, at default parameters; activations, scores and class against a reference, SDOTP counts, cycle count |

`tb_maupiti_top` runs the whole block with **no parameter changes**. The
testbench acts as the host and the analog front end. It:

- programs the OTP;
- loads the application into the instruction RAM during reset;
- streams a 128-word weight vector into the data RAM while the core already
  runs.

The application, booted from the ROM:

- copies OTP words to calibration registers;
- takes an ecall and a misaligned-load trap;
- runs compressed code;
- enables the readout and waits a full 2,000,000-cycle frame period;
- runs a 128-iteration SDOTP8/SDOTP4 loop over the frame buffer and the
  weights;
- reports its results in calibration registers.

The testbench checks those results against its own arithmetic. It also counts
each mechanism and fails if any count is zero or wrong:

- ID/EX stalls and PC redirects;
- compressed instructions;
- SDOTP8 and SDOTP4 instructions;
- multiply/divide instructions and traps;
- load-port writes that took a memory from the core;
- front-end steps and frames.

One run takes about 2.0 million cycles and a few seconds of simulation.

To run a testbench with Verilator (5.x), from the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/maupiti_pkg.sv tb/rv_asm_pkg.sv tb/tb_maupiti_core.sv --top-module tb_maupiti_core
./obj_dir/Vtb_maupiti_core +verilator+rand+reset+2
```

`+verilator+rand+reset+2` starts every uninitialised variable at a random
value, which shows up any state the design forgets to reset or initialise.
To build the design alone, name `rtl/maupiti_top.sv` with the package and
`-y rtl`.

## Files

- `rtl/maupiti_pkg.sv`: shared types, SDOTP opcode, address map.
- Core:
  - `rtl/maupiti_core.sv` (top of the core);
  - fetch: `if_stage`, `prefetch_buffer`, `compressed_decoder`;
  - decode/execute: `decoder`, `controller`, `register_file`, `alu`,
    `sdotp_unit`, `multdiv`, `lsu`, `csr`, `tracer`.
- Memories: `sram`, `boot_rom`, `inst_mem_if`, `data_mem_if`, `otp`.
- Peripherals: `calib_regs`, `tmos_readout`.
- Top: `maupiti_top`.
- `tb/`: one testbench per module, named `tb_<module>.sv`; `tb_sram` covers
  both RAMs. `tb_maupiti_workload.sv` runs the network example.
  `rv_asm_pkg.sv` is the encoder package.

Each file opens with a description of its behaviour, interface and timing,
and of which parts follow the published design and which are choices made
here.
