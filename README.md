# RVCoreP in SystemVerilog: a five-stage RV32I soft processor with a pipelined branch predictor

RVCoreP is a five-stage RV32I processor designed to run fast on an FPGA
without giving up instructions per cycle. A plain five-stage RISC-V
pipeline on an FPGA is limited by three long paths:

- the single-cycle "read BTB, read PHT, choose the next PC" loop in fetch;
- the ALU's wide result multiplexer, fed by the two forwarding multiplexers;
- the memory read followed by byte alignment and sign extension.

RVCoreP shortens each of them without changing what the pipeline does:

1. **A branch predictor split over two cycles.** Registers are placed inside
   the gshare/BTB loop. The tables are read one cycle before the
   instruction they predict is fetched.
2. **One-hot selection by XOR.** The ALU and the load align/extend unit
   compute every candidate result in parallel. Each candidate is ANDed
   with its own bit of a one-hot control word, and the survivors are XORed
   together. This replaces a binary-encoded multiplexer with a shallow
   AND/XOR tree.
3. **Hazards found one stage early.** A small partial decoder sits in the
   fetch stage, so the load-use check and the forwarding selects are ready
   a cycle before they are needed.

This RTL implements the processor and the small evaluation system around
it: instruction memory, data memory, a serial transmitter with a
buffer, and a serial receiver that can load the program. Defaults match
the sizes used for the benchmark runs:
- 32 KB instruction memory and 32 KB data memory;
- an 8,192-entry pattern history table (PHT);
- a 512-entry branch target buffer (BTB).

## Pipeline overview

| stage | work | registers leaving it |
|---|---|---|
| If | `r_pc` holds the PC whose word arrives from the instruction memory now. `decoder_if` partially decodes it. `load_use` compares its sources with a load in Id. `bpred` supplies the prediction `w_btkn` for this instruction. The next PC `w_npc` is selected. | IfId (instruction, PC, partial decode, prediction state, `IfId_luse`) |
| Id | `decoder_id` builds one-hot controls and the immediate. The register file is read asynchronously. The immediate replaces rs2 where needed. The forwarding selects for Ex are computed. | IdEx |
| Ex | Two forwarding multiplexers take `ExMa_rslt` (from Ma) or `MaWb_rslt` (from Wb). `alu_opt` computes the result and the branch decision. `D_ADDR = rs1 + imm` goes to the data memory. The true next PC is compared with the predicted one. | ExMa (including the mispredict bit) |
| Ma | On a misprediction, fetch is redirected to `Ma_pc_true`; If, Id and Ex are flushed. The PHT/BTB are updated. `align_extend` formats the load data. | MaWb |
| Wb | The register file is written. | — |

The next PC is chosen by fixed priority:

1. `Ma_pc_true` when the instruction in Ma was mispredicted;
2. `r_pc` (hold) during a load-use stall;
3. the BTB target when the fetched instruction is predicted taken;
4. `r_pc + 4`.

The instruction memory is addressed by `w_npc`, not by `r_pc`. Block RAM
needs its address one edge ahead, so the word for the PC latched at an edge
is read at that same edge.

### Cycle costs

| event | cost | why |
|---|---|---|
| independent instructions | 1 per cycle | — |
| load followed by a user of its result | 1 extra cycle | bubble inserted into IdEx; If and Id hold |
| user two or more instructions after the load | 0 | forwarding from Wb, or register-file write-through |
| correctly predicted taken branch or jump | 0 | BTB target used in If |
| misprediction (wrong direction, wrong or missing target) | 3 cycles | detected in Ex, acted on from Ma; If, Id and Ex are flushed |
| branch fetched right after a redirect or a predicted-taken transfer | treated as not taken | see "the validity rule" below |

The testbenches check each of these numbers by timing retirements.

## The two-cycle branch predictor (`bpred`)

This is the least obvious part of the design.

**The original loop.** A classic gshare with a BTB works in one cycle:
1. read the BTB and the PHT with the current PC (the PHT index is `PC ^ BHR`);
2. combine the two reads into taken/not-taken;
3. choose the next PC.

On an FPGA, the block-RAM read plus the decision logic plus the next-PC
multiplexer takes more than a clock cycle.

**The split.** The pipelined version adds a register after the BTB
(`r_btb`) and a copy of the PC register (`r_pcx`), which forms the PHT
index. The loop then spans two cycles:

```
cycle t   (preIf)  BTB RAM addressed by PC P; PHT RAM addressed by P ^ BHR
cycle t+1 (If)     r_btb = BTB[P], PHT output = PHT[P ^ BHR]
                   -> prediction for the instruction at Q = P + 4
```

A table entry read with address P is therefore used for the instruction at
P + 4. Two consequences follow.

- **BTB entries are written at (branch PC − 4).** When a branch at address
  B resolves taken, its target is stored at the BTB index and tag of
  B − 4. Similarly, the PHT counter that predicts B is the one at
  `(B − 4) ^ BHR`. That index is carried down the pipeline with the branch
  and used unchanged for the update. The counter value read at prediction
  time is carried too, so the update needs no second read port.
- **The validity rule.** The prediction in If is used only when the PC of
  the preIf cycle plus 4 equals the current PC. It is dropped after a
  redirect, after a predicted-taken transfer, and after any other jump in
  the fetch stream. In those cases the tables were read for an address
  that does not precede the instruction now in If. A branch that directly
  follows a taken control transfer is therefore always fetched as "not
  taken". This is the price of the pipelining: it lowers prediction
  accuracy a little in exchange for the shorter path.

**History.** The branch history register `r_BHR` is 13 bits here, the
log2 of the PHT size. It is updated speculatively:
- On a valid BTB hit for a conditional branch, the `join` logic shifts the
  PHT's prediction into it.
- The BHR value before the shift travels with the instruction.
- On a misprediction, `r_BHR` is reloaded from that snapshot. For a
  conditional branch the actual outcome is shifted in; for anything else
  nothing is.

**Jumps.** BTB entries carry a "conditional" bit. A JAL or JALR that hits
in the BTB is predicted taken without consulting the PHT, and it does not
touch the history. A JALR whose target changes, such as a return to a
different caller, is mispredicted and costs 3 cycles. There is no
return-address stack.

**Stalls.** During a load-use stall the If-side registers hold: `r_btb`,
the PHT output, the BTB's PC and the BHR. The stalled instruction keeps
its prediction, and the history shifts only once.

**Storage:**
- PHT: 8,192 × 2-bit saturating counters, initialised to weakly not taken.
- BTB: 512 entries, direct mapped. Each entry holds a valid bit, a
  conditional bit, a 21-bit tag and a 30-bit word target.

Both tables are block-RAM style arrays with one read and one write per
cycle. They are initialised by `initial` blocks rather than by reset.

## Hazards detected in fetch (`decoder_if`, `load_use`, the forwarding selects)

`decoder_if` extracts only what hazard logic needs: rs1, rs2, rd, whether
each source is really read, and whether the instruction writes a register,
writes memory or is a load.

**Load-use.** `load_use` compares the sources of the instruction being
fetched with the destination of a load that is in Id in the same cycle.
The result is registered into IfId as `IfId_luse`. One cycle later the
load is in Ex and its user is in Id, and that registered bit is the stall
signal (`w_stall`) directly: no comparator sits on the stall path.

**Forwarding.** The forwarding selects are computed in Id and registered
into IdEx. In Ex, the two operand multiplexers have ready-made selects
with a fixed priority: Ma first (the newer value), then Wb.

**Write-through.** A producer three instructions ahead is covered by the
register file. A read of the register being written in the same cycle
returns the new value.

## One-hot XOR selection (`alu_opt`, `align_extend`)

`alu_opt` computes these candidates every cycle:
- add, subtract, signed and unsigned less-than;
- XOR, OR, AND;
- the three shifts (a full 32-bit barrel shifter);
- the LUI immediate, `pc + imm` for AUIPC, and `pc + 4` for the link of JAL/JALR.

Each candidate is masked by one bit of a 13-bit one-hot control word from
`decoder_id`, and all are XORed. With one bit set this is the selected
value; with none it is zero. The branch decision (`Ex_b_rslt`) is built
the same way from the six comparisons and an "always" bit for JAL/JALR.

`align_extend` does the same for loads:
1. small multiplexers shift the memory word by the byte offset;
2. five candidates (LB, LH, LW, LBU, LHU) are masked by a 5-bit one-hot
   word and XORed.

## The evaluation system (`rvcorep_system`)

- **Memories.** `imem` and `dmem` have registered reads. `dmem` has byte
  enables: stores replicate the byte or halfword into every lane and
  enable only the addressed ones.
- **Loading a program.** While `rst` is high, every `ld_we` cycle writes
  `ld_data` at `ld_addr` into *both* memories. This lets a linked RV32I
  image, with its code, constants and initialised data, run from separate
  instruction and data memories. Fetch starts at address 0 in the first
  cycle after reset.
- **Loading a program over the serial line.** If `boot_serial` is high
  when `rst` falls, `uart_rx` (8N1, same bit time as the transmitter)
  and `prog_loader` take the image from `rxd` instead. The format is:
  - a 4-byte word count N;
  - N words from address 0.

  Both are least significant byte first. Each completed word is written
  into both memories through the same path as the load port. The core
  fetches its first word in its last reset cycle, so that cycle must not
  be a write: the core is held in reset until one cycle after the last
  write. The same holds for the load port, where `ld_we` must be low in
  the last cycle of `rst`. The receiver checks the start bit again half a bit
  time after the falling edge, so a shorter glitch is ignored. A frame
  whose stop bit is 0 is dropped. A word count of zero releases the core
  at once.
- **Output.** A store to `TX_ADDR` (default `0x4000_0000`) pushes its low
  byte into the transmit buffer of `uart_tx`. `uart_tx` is a 64-entry FIFO
  feeding an 8N1 transmitter: LSB first, `CLKS_PER_BIT` clocks per bit,
  frames back to back. Stores anywhere in the `0x4xxx_xxxx` region do not
  write the data memory. A character written while the buffer is full is
  dropped.
- **Observation.** A retire trace from Wb (`rt_valid`, `rt_pc`, `rt_ir`,
  `rt_we`, `rt_rd`, `rt_data`) and one-cycle event pulses (`perf`: retire,
  stall, mispredict, predicted taken, BTB hit on a branch, forward from
  Ma, forward from Wb) are brought out.

Implemented: all of RV32I except the privileged part. FENCE, ECALL, EBREAK
and the CSR instructions execute as no-ops. There are no traps, no
interrupts and no misalignment checks: a misaligned access uses the
aligned word.

## How it behaves on Dhrystone

`tb_dhrystone` runs the riscv-tests Dhrystone on the full-size system:
- 2,000 runs;
- RV32I, gcc -O2;
- software multiply and divide;
- the timer CSR reads replaced by a software counter, since this core has
  no CSRs.

Every retired instruction is checked against an independent instruction-set
model. The program checks its own results and prints `DHRYSTONE OK`.

| | this RTL | published RVCoreP figure |
|---|---|---|
| instructions | 908,725 | 909,443 |
| IPC | 0.893 | 0.935 |
| branch + jump predictions: hit / miss | 183,092 / 18,148 (0.910) | 201,153 / 16,481 (0.924) |
| conditional branches only: hit rate | 0.969 | — |
| load-use stalls | 54,015 | — |

The stall count equals, exactly, the number of loads immediately followed
by a user of their result in the executed instruction stream. The
detector never stalls without need.

Most of the IPC gap is the compiler's code rather than the pipeline. This
build's byte-wise `strcmp` and gcc 13's scheduling leave many load-use
pairs, and the published run used an older compiler and library. The
predictor's miss count is of the same order as published.

The testbench then runs the benchmark a second time, as on a board: the
same image is received over `rxd` through the serial loader, with the same
checks. It executes the same 908,725 instructions. It takes 1,016,852
cycles instead of 1,017,186 because the predictor tables are not reset and
start out trained.

CoreMark, the other benchmark used to evaluate RVCoreP, was not run. The
memories (32 KB each) are large enough for it.

## Where this RTL goes beyond, or differs from, the published description

The published description gives the stage structure, the next-PC
priority, the two forwarding paths, the location of load-use detection,
the pipelined predictor with its PC − 4 BTB indexing and validity rule,
the one-hot/XOR selection, the table sizes and the memory sizes. The
following are this design's own choices:

- encodings of all control words; the 13-bit BHR; the BTB entry layout;
  2-bit counters initialised weakly not taken;
- jumps held in the BTB and predicted taken without the PHT. The source
  only implies that the BTB tells conditional branches apart from other
  entries.
- the forwarding selects registered in IdEx; the carried PHT index,
  counter and BHR snapshot;
- register-file write-through;
- the load port, the address map, and the UART format, bit time and buffer
  depth;
- the serial load format (word count, then words) and the `boot_serial`
  strap that selects it. The source only says that the board receives the
  same binary over the serial link.
- no CSRs, traps or interrupts;
- the load-use result registered with the fetched instruction. The text
  says it is held in IdEx, while the block diagram shows it entering IfId
  as `IfId_luse`. This RTL follows the diagram. Either way the penalty is
  one cycle.

The FPGA build of RVCoreP used 4 KB memories. Set
`IMEM_BYTES = DMEM_BYTES = 4096` for that configuration.

## Files

`rtl/`:
- `rvcorep_pkg.sv`: opcodes, one-hot control types, the partial-decode
  struct, the event struct.
- `alu_opt.sv`, `align_extend.sv`, `regfile.sv`, `decoder_if.sv`,
  `decoder_id.sv`, `load_use.sv`, `bpred.sv`: the units described above.
- `imem.sv`, `dmem.sv`: block-RAM style memories.
- `rvcorep.sv`: the pipeline.
- `uart_tx.sv`: transmit buffer and 8N1 transmitter.
- `uart_rx.sv`, `prog_loader.sv`: 8N1 receiver and serial program loader.
- `rvcorep_system.sv`: the top level.

`tb/`:
- one self-checking testbench per unit (`tb_<unit>.sv`);
- `tb_rvcorep.sv`: directed programs with cycle-exact checks of the
  penalties above;
- `tb_prog_loader.sv`: the receiver and loader together, at a short bit
  time;
- `tb_rvcorep_system.sv`: an end-to-end run at full size that counts every
  mechanism. It loads one program through the load port and one over the
  serial line;
- `tb_dhrystone.sv` with `dhrystone.hex` (the program image, one 32-bit
  little-endian word per line, from address 0);
- `rv_tb_pkg.sv`: an RV32I assembler in functions, and the reference
  instruction-set model.

Each testbench prints `TB_RESULT checks=<n> failures=<n>`.

## Simulating

From the repository root (the Dhrystone image is read as `tb/dhrystone.hex`):

```
verilator --binary --timing -Wno-fatal --top-module tb_dhrystone \
  -y rtl -y tb +libext+.sv rtl/rvcorep_pkg.sv tb/rv_tb_pkg.sv tb/tb_dhrystone.sv
./obj_dir/Vtb_dhrystone
```

Replace `tb_dhrystone` with any other testbench name. All unit testbenches
finish in seconds, and Dhrystone in a few seconds. The registers and
memories are not reset, so the testbenches run correctly with randomised
initial state (`+verilator+rand+reset+2`).

To run another program:
1. Link it at address 0, with the stack inside the data memory.
2. Write its words through the load port while holding reset. Or hold
   `boot_serial` high, release reset, and send the word count and then the
   words on `rxd`.
3. Release reset.
4. Print through stores to `TX_ADDR`.
