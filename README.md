# WindMill: a ring of four coarse-grained reconfigurable arrays

WindMill is a coarse-grained reconfigurable array (CGRA) accelerator attached
to a small RISC-V host. Its work is done by four identical
reconfigurable computing arrays (RCAs) connected in a ring. Each RCA has
an 8x8 grid of processing elements (PEs) and its own 16-bank shared memory,
and each can also reach the memory of its neighbour. A program for an RCA is
not a stream of instructions but a set of configurations: every PE holds a
few configuration words. Each word says which operation to apply, where its two operands
come from, and how many times to fire. Data then flow through the grid as
tokens. A PE fires when its operands have arrived, so once started the array runs
without any central sequencer.

This repository holds synthesizable SystemVerilog for the accelerator, a
self-checking testbench for every block, and an end-to-end testbench. At the
default size that testbench runs two jobs: one driven from the host bus, one
driven by the on-chip controller PE.

## Block map

```
 host (AXI4-Lite) --> host_if --> rtt <-- cpe
                                   |
                    +--------------+--------------+
                    | launch/mode   | DMA command  |
                    v               v              |
   +------ RCA0 --> RCA1 --> RCA2 --> RCA3 ---+   dma <--> external memory
   |  (each RCA reaches the next one's memory) |        (AXI4-Lite master)
   +-------------------------------------------+
```

Each RCA (`rca`) contains:

- `pea`: the 8x8 array. The 28 border positions are load/store units
  (`lsu`); the 36 inner positions are general PEs (`gpe`). Each of the
  8 PE lines has one context memory (`ctx_line`). The array also holds the
  shared registers (`shared_reg`).
- `shared_mem`: 16 banks of 256 x 32-bit words (`sram_bank`) behind the
  parallel access interface (`pai`). The interface has one round-robin
  arbiter per bank.
- `cfg_ctrl`: turns a stream of configuration records into
  context-memory writes.
- `data_ctrl`: handles launch and finish, the run cycle counter, the mode
  register (SCMD, ping-pong) and the ping-pong half select.
- A round-robin arbiter that chooses which LSU's remote request goes out
  on the ring port.

Shared types live in `windmill_pkg`. Two small helpers are used inside the
PEs: `rr_arbiter` (used by the PAI and the ring port) and `opnd_slot` (an
operand token buffer). `pe_ctrl` is the configuration-flow part of a PE.

## The processing element

A PE has four pipeline stages, split into two flows.

The configuration flow, in `pe_ctrl`:

1. **Fetch.** The PE sends its step address to the line's context memory.
2. **Decode.** The returned word is registered and becomes the active
   configuration.

The data flow, in `gpe` and `lsu`:

3. **Execute.** The ALU, or the LSU address generator, works on the operands.
4. **Write back.** The result is registered and broadcast to the neighbours.

The two flows overlap. While step *k* executes, the address of step *k+1*
is already known, so the next configuration is fetched and decoded ahead of
time.

**Iteration control** switches steps statically and fires dynamically:

- Each configuration carries an iteration count. A step ends after exactly
  that many firings.
- A step with the `last` flag ends the PE's program.
- A NOP step ends at once. This lets a PE wait out steps that belong to
  other PEs of the same line in SCMD mode.

The first step is active 3 cycles after `start`. An ALU result appears on
the PE output 2 cycles after the firing cycle (one execute cycle and one
write-back register).

**Operands.** Each operand has a source:

- one of 8 links: N, E, S, W, or the one-hop N2, E2, S2, W2, all wrapping
  around the array edges (torus);
- the PE's own local register;
- the immediate field;
- a shared register;
- none.

A link operand is held in a one-entry token buffer (`opnd_slot`). The PE
fires when every operand it needs is present, and firing consumes the
tokens.

**There is no back-pressure.** A producer never waits for a consumer. The
configurations must be scheduled statically so that no token arrives while
the previous one is still waiting. An assertion in `opnd_slot` reports
such an overrun in simulation. This is the main rule for anyone writing
configurations by hand:

- Streams that meet at one PE must advance at the same rate.
- Loads that feed the same PE should therefore not conflict in a memory bank.

**Configuration word** (`cfg_t`, 64 bits, LSB first):

| Field | Bits | Meaning |
|---|---|---|
| `op` | 5 | operation (NOP, ADD, SUB, MUL, AND, OR, XOR, SHL, SHR, LT, EQ, MAX, MIN, PASS, SEL, MAC, LOAD, STORE) |
| `src_a` | 4 | source of operand A |
| `src_b` | 4 | source of operand B |
| `imm` | 16 | immediate value, or LSU base address |
| `iter` | 8 | firings in this step |
| `stride` | 8 | affine address stride |
| `affine` | 1 | affine (1) or operand-based (0) addressing |
| `sreg_mode` | 2 | shared-register mode used by this step |
| `sreg_we` | 1 | write the result to a shared register |
| `loc_we` | 1 | write the result to the local register |
| `last` | 1 | this step ends the program |
| reserved | 13 | — |

**LSUs.** An LSU is a PE with a memory port:

- An affine access uses address `imm + i*stride`, where `i` is the
  firing index.
- A non-affine load uses `imm + A`.
- A non-affine store uses `imm + B`, and stores A.
- LSUs also run plain ALU operations.

LSU addresses are 13 bits. With bit 12 clear, the access goes to the RCA's
own memory. With bit 12 set, it goes to the memory of the next RCA on the
ring.

## Context memory, MCMD and SCMD

Each PE line has one context memory of 8 x DEPTH words (DEPTH = 4).

- **MCMD** (multi-configuration). PE *c* of the line reads only its own
  entries, `c*DEPTH + k`, so each PE has a private program of up to 4 steps.
- **SCMD** (single-configuration). All 8 PEs of the line step through the
  same program of 32 entries. That is 8 times as many steps. Each PE
  still keeps its own step counter and its own tokens.

At reset every entry is NOP with `last` set, so an unprogrammed PE finishes
at once.

## Shared registers

A GPE can write its result into a shared register. Any PE can read one as
an operand. There are four modes:

| Mode | Registers | Shared by |
|---|---|---|
| line | 8 | the PEs of one line |
| row | 8 | the PEs of one column |
| quadrant | 4 | the PEs of one 4x4 quadrant |
| global | 1 | every PE |

If several PEs write the same register in the same cycle, the lowest PE
index wins.

## Shared memory and the parallel access interface

- **Banks and address.** The 4096 words of an RCA are interleaved over
  16 banks: address bits [3:0] choose the bank.
- **Requesters.** The PAI serves 30 of them: the 28 LSUs, the port from
  the previous RCA, and the DMA.
- **Timing.** Each bank grants one request per cycle, round-robin. A grant
  comes in the same cycle as the request, and read data arrive one cycle
  later.
- **Bank conflicts.** A requester that is not granted keeps its request
  up. An LSU then stalls its own step until the grant comes.

**Ping-pong.** With ping-pong on:

- The array and the ring port see only one half of the memory: address
  bit 11 is replaced by `pp_sel`.
- The DMA sees the other half.
- `pp_sel` flips each time the array signals finish.

So the next block of input can be loaded while the array computes, and the
array finds it in place at the next launch.

## Host view: custom instructions and the CPE

The host talks to the accelerator through an AXI4-Lite slave (`host_if`).
The register map is this design's own:

| Offset | Register |
|---|---|
| 0x00, 0x04, 0x08 | ARG0 (external byte address), ARG1 (shared-memory word address), ARG2 (length in words) |
| 0x0C | INSTR. Writing it issues the instruction. It is ignored while one is pending. |
| 0x10 | STATUS: [0] pending, [7:4] RCA busy, [11:8] RCA done, [12] CPE busy, [13] DMA error, [19:16] ping-pong select |
| 0x14 | CPE_CTRL: [7:0] iterations, [15:8] program length. Writing it starts the CPE. |
| 0x20 + 4i | run cycle count of RCA *i* |
| 0x100 + 16j + 4w | word *w* of CPE program entry *j* (INSTR, ARG0, ARG1, ARG2) |

The register transformation table (`rtt`) executes one instruction at a
time. The opcode is in [31:28], an RCA mask in [27:24], and a field in
[23:0].

| Opcode | Action |
|---|---|
| CFG (1) | DMA ARG2 words from ARG0 into the configuration controllers of the mask |
| LOAD (2) | DMA from ARG0 into shared memory of RCA field[1:0] at ARG1 |
| STORE (3) | DMA from shared memory to ARG0 |
| LAUNCH (4) | start the arrays of the mask; completes at once |
| WAIT (5) | completes when no RCA of the mask is busy |
| MODE (6) | SCMD = field[0], ping-pong = field[1] for the mask |

A configuration stream is a sequence of 3-word records: a header
`{line[10:8], entry[4:0]}`, then the low and the high half of the 64-bit
word.

**The controller PE** (`cpe`) stores up to 16 instructions. It replays
them a given number of times without the host. While it runs, it owns the
RTT. A typical program is
`LOAD, LAUNCH, LOAD (next block), WAIT, STORE`, repeated per layer or per
block.

**The DMA** is an AXI4-Lite master with one transaction in flight. It
copies words between external memory and one RCA's shared memory, or
streams them to the configuration controllers.

## What follows the paper and what does not

These points follow the paper:

- four RCAs on a ring, each with neighbour access;
- an 8x8 array of 36 GPEs surrounded by 28 LSUs;
- mesh, one-hop and torus links;
- the four shared-register modes;
- the four-stage PE with overlapping configuration and data flows;
- static step switching with dynamic firing;
- SCMD and MCMD, with SCMD giving 8 times the configurations;
- 16 banks of 256 x 32 bits with round-robin arbitration;
- ping-pong by the address MSB, flipped at finish;
- a DMA;
- an RTT that decodes the four host steps;
- a CPE that launches the arrays without the host.

These are this design's own choices, because the paper does not give them:

- the configuration word and the instruction encodings;
- the register map;
- the absence of back-pressure, and the one-entry operand buffers;
- word interleaving across the banks;
- the ring direction and its single port per RCA;
- the shared-register counts;
- DEPTH = 4. The paper compares 2, 4, 8 and 16 entries in a figure and does
  not state the standard value.
- a CPE depth of 16.

The CPE is built as an instruction sequencer. The paper describes it as a
GPE extended with access to the RTT. The effect is the same.

These are not included:

- the VexRiscv host core: the accelerator exposes the AXI4-Lite slave it
  would drive;
- the blocks only named in the paper's overview ("BufferPool", "Data
  Distribution");
- external memory.

The reported 750 MHz in 40 nm has not been checked; no timing constraints
are provided.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself.
Build and run one with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/windmill_pkg.sv tb/tb_util_pkg.sv tb/tb_windmill_top.sv \
  --top-module tb_windmill_top -Mdir obj
./obj/Vtb_windmill_top
```

`tb_windmill_top` runs the full default configuration:

- **Job 1, from the host.** On RCA0 in MCMD, one GPE switches from add to
  subtract after 8 firings. One LSU stores locally. Another LSU stores the
  same results into RCA1 over the ring.
- **Job 2, from the CPE.** On RCA2 in SCMD with ping-pong, a 6-step line
  program adds a global shared-register constant. The next input is
  loaded during the run.

The testbench counts bank conflicts, step switches, ring accesses, SCMD
runs, ping-pong flips, DMA/compute overlap, shared-register writes and CPE
completions. It fails if any of them never happened.

`tb_util_pkg` has the helpers `mk_cfg` (build a configuration word) and
`cfg_hdr` (build a record header). `ext_mem` is a behavioural AXI4-Lite
memory with random ready delays.
