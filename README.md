# HiSEP-Q quantum control processor in SystemVerilog

A superconducting quantum computer is driven by a digital control processor. The processor turns a program into a stream of precisely timed pulse commands, one channel per qubit, and collects the read-out bits. Two things make such processors hard to scale past a few dozen qubits.

- **Program size.** Naming many qubits per operation costs instruction bits.
- **Result traffic.** A program is repeated for hundreds of shots, and every shot's measurement vector would normally be shipped to the host.

HiSEP-Q attacks both problems:

- **Mixed addressing.** Single-qubit gates name their qubits with a *bit mask*. Two-qubit gates name their pairs with *7-bit immediate indices*. Both are held in target registers that also carry a small *offset* selecting a window of the qubit array.
- **Long instructions.** 128-bit long instructions load a register that covers 100 qubits, or seven pairs, in one go.
- **VLIW bundle.** A two-lane VLIW "Q.Bundle" applies a gate to whatever a register names and carries its own wait interval.
- **Onboard histogram.** The measurement vector of every shot is accumulated on chip. The host only reads the M most frequent states.

This RTL implements the programmable-logic part of that design:

- the host bus and its four memory-mapped slaves;
- the hybrid classical/quantum core;
- per-qubit timed queues that release micro-codes on the exact clock cycle;
- the histogram unit.

The host CPU and the analog converters sit outside. Their signals are the top-level ports.

## Top level

`hisepq_top` has the following parts:

- **`bus_interface`:** an AXI4-Lite slave.
- **Four slaves on a simple internal register bus:**
  - `csr_regs`: control and status;
  - `cfg_regs`: configuration;
  - `pram`: program RAM, 4096 words;
  - `dram`: data RAM, 1024 words.
- **`hybrid_core`.**

Host address map (byte addresses; bits [15:14] select the slave and bits [13:2] give the word):

| Base   | Slave | Words |
|--------|-------|-------|
| 0x0000 | CSR   | 0: write bit 0 = start; read {hist_overflow, err_miss, err_conflict, done, busy}. 1: central clock |
| 0x4000 | CFG   | 0: program start address. 1: write one LUT entry {op[22:16], meas[8], micro[7:0]}. 2: last LUT write |
| 0x8000 | PRAM  | program words (a long instruction takes four words, bits 127:96 first) |
| 0xC000 | DRAM  | data words shared by LW/SW/FHR and the host |

Ports towards the signal side:

- `q_valid[q]`, `q_micro[q]` and `q_role[q]` per qubit. They are valid in exactly the cycle the operation's time point equals the central clock. The role is `11` for a single-qubit gate, `01` for a two-qubit source and `10` for a target.
- `ro_valid[q]` / `ro_bit[q]` bring measurement results back, at any later time.
- `end_irq` is high once END has executed and every queued operation and measurement has completed.

A typical host sequence:

1. Write the program into PRAM.
2. Optionally reprogram gate-op LUT entries.
3. Write the start address.
4. Write 1 to CSR word 0.
5. Wait for `done`.
6. Read the histogram words that the program's FHR instruction stored in DRAM.

## Mixed addressing and the target registers

The Q-register file (`qreg_file`) holds four banks of 32 registers, one bank per *kind*:

| Kind | Loaded by | Payload | Addresses |
|------|-----------|---------|-----------|
| Sd     | SMSO  (32 bit)  | 8-bit mask          | qubits base .. base+7 |
| Sd(l)  | SMSOL (128 bit) | 100-bit mask        | qubits base .. base+99 |
| Td     | SITO  (32 bit)  | one (source, target) pair of 7-bit indices | base+src, base+tgt |
| Td(l)  | SITOL (128 bit) | 7 pairs + 7 valid bits | up to seven pairs |

Each register also stores a 4-bit offset.

- **Base address.** `offset_control` turns the offset into a base qubit index: offset × 8 for the short mask, offset × 100 for the other kinds. The factor of 100 is the paper's. The stride of 8 for the short mask is this design's choice.
- **QSet.** A QSet instruction changes one payload bit of an existing register. For example, it can drop one qubit from a mask without reloading the register.
- **Decoding.** `qreg_decoder` expands a register into a 2-bit indicator per qubit: `00` none, `01` source, `10` target, `11` single-qubit. This is the "four-to-one" decoding: each qubit's indicator comes from one of four decoders, chosen by the register kind.
- **Index range.** Qubit indices are 11 bits wide, so that offset windows up to 15 × 100 + 99 can be formed. Qubits at or above NUM_QUBITS are ignored.

The bit positions of SMSO, SMSOL, SITO and SITOL are those the paper publishes. In SITOL, pair p sits at bits [14p+13:14p] of the index field, with its source in the upper seven bits, and its valid bit is at bit 98+p.

All other encodings are this design's. Opcodes are bits [30:25] of a word; opcode bit 5 marks a quantum instruction; bit 31 = 1 marks a Q.Bundle:

```
Q.Bundle: 1 | op0[30:24] kind0[23:22] reg0[21:17] | op1[16:10] kind1[9:8] reg1[7:3] | PI[2:0]
QSet    : opcode | kind[24:23] reg[22:18] bit[17:11] value[10]
QWAIT imm[19:0]    QWAITR rs[19:15]
```

Each bundle lane names a gate operation (7 bits) and a register by kind and index. Operation 0 leaves a lane empty.

## From instruction to timed micro-code

This is the heart of the design, inside `hybrid_core`.

1. **`instr_dispatcher`** fetches from PRAM, one word per synchronous read. It assembles four words into a long instruction when the first word's opcode is SMSOL or SITOL. It hands each instruction to the classical unit or the quantum decoder.
   - A short instruction is offered 3 cycles after the previous one was accepted; a long one 6 cycles after.
   - Taken branches redirect it. END or a conflict stops it.
2. **`quantum_decoder`** is combinational.
   - Register-load instructions write the Q-register file.
   - QWAIT/QWAITR and the bundle's PI advance the time manager.
   - A bundle reads two registers (one per lane) and looks up the two gate operations in `gate_op_lut`. It then pushes one word per lane into `op_buffer` 1 and 2.
   - The word is {time point, LUT entry, 2-bit indicator per qubit}.
   - A bundle waits while either op buffer is full.
3. **`time_manager`** keeps the central clock `now`, which is reset by start, and the time point `tp` of the last scheduled operation. Each interval moves the time point:

   `tp_next = max(tp + interval, now + LEAD)`, with LEAD = 8.

   The paper only says that an absolute time point is computed from the interval and the central clock. The floor of LEAD cycles is this design's rule. It gives each operation LEAD cycles to pass through the op buffers and the dispatcher, even after the program has been stalled. Programs that keep ahead of the clock (a QWAIT at the start of each shot) see exact relative timing.
4. **`gate_op_lut`** maps the 7-bit operation to an 8-bit micro-code and a measurement flag.
   - The reset contents are micro = op for every entry, with operation 127 flagged as measurement.
   - The host can overwrite any entry through CFG.
5. **`qop_dispatcher`** takes both op-buffer heads in the same cycle. It writes one entry into the timed FIFO of every qubit that either lane addresses. It refuses two operations on one qubit at one time point, either because both lanes name it or because the qubit's previous entry has the same time point. In that case it raises the sticky `err_conflict`, and the core stops. It waits, without losing anything, while any addressed FIFO is full.
6. **`timed_fifo`** (one per qubit, depth 8) releases its head when `head.t == now`.
   - A head whose time has already passed is dropped and raises `err_miss`. The LEAD margin normally prevents this; it can still happen when a full FIFO holds the dispatcher back for longer than the margin.
   - The role bits tell the signal side which end of a two-qubit gate this channel plays.

Throughput: one bundle per fetch (3 cycles), one dispatcher step per cycle, and one issue per qubit per cycle.

## Classical unit, measurement and feedback

`simple_riscv` executes the auxiliary classical instructions:

- ALU: AND, OR, XOR, ADD, SUB on 32 × 32-bit registers;
- CMP, which sets the flags EQ/NE/LT/GE and unsigned LT/GE;
- BR and J, PC-relative in words from the branch;
- FBR, which copies a flag into a register;
- LDI, LDUI, LW and SW;
- FMR, SRA, FHR and END.

`qmeasure_reg` holds the latest result bit of every qubit and a pending bit per issued measurement.

- **FMR** (fetch measurement result) copies one qubit's result into a register. It waits only while that qubit still has a measurement outstanding:
  - one in an op buffer;
  - one counted in the qubit's timed FIFO (a per-qubit counter in `hybrid_core`);
  - or one issued whose result has not come back.

  FMR completes in the cycle after the result arrives, and a branch on it can follow immediately.
- **SRA** (store result to accumulator) sends the whole result vector to the histogram. It waits until the whole quantum side is idle, so it always sees the complete shot.

With these, a program can branch on a measurement. The shot test program counts the shots in which qubit 0 read 1 in this way.

## Onboard histogram

`onboard_histogram` has three stages.

- **Accumulator.** It keeps up to T = 100 distinct states (one per possible shot) and their counts.
- **Comparator.** A parallel comparator finds the incoming state in one cycle. If the state is new, it takes the next free slot. If all T slots are used, the state is dropped and `hist_overflow` is set.
- **Sorter.** In the same cycle, a top-M (M = 4) sorter is updated:
  - a state already in the list takes its new count;
  - otherwise it replaces entry M when its count is strictly larger;
  - then M odd-even transposition passes restore the order.

The top-M list is final M + 1 = 5 cycles after SRA, the figure the paper reports.

FHR writes the list to DRAM from the address in a register. Each entry is ceil(NUM_QUBITS/32) state words, least significant first, followed by a count word. Empty entries are written as zeros. For 100 qubits and M = 4 that is 80 bytes, against 1250 bytes for 100 raw 100-bit shot results. The paper quotes 50 bytes because it counts only the 4 × 100 state bits.

## Parameters

| Parameter | Default | Where |
|-----------|---------|-------|
| NUM_QUBITS | 100 | top, core, decoder, dispatcher, histogram |
| T (histogram depth = shots) | 100 | top, core, histogram |
| M (top results) | 4 | top, core, histogram, classical unit |
| FIFO_DEPTH | 8 | top, core |
| OB_DEPTH | 4 | core |
| LEAD | 8 | core, time manager |
| PRAM_DEPTH / DRAM_DEPTH | 4096 / 1024 words | top |

NUM_QUBITS, T and M are the paper's numbers. The depths, LEAD and all widths not named above are this design's.

## Departures from the paper and own choices

- The paper gives the instruction set at the level of formats and mnemonics. The following are all chosen here:
  - the opcode values;
  - the classical encodings;
  - the Q.Bundle layout;
  - the QSet fields;
  - the FHR output layout.
- The host bus is AXI4-Lite with a flat four-slave map. Each slave's register contents are this design's.
- The instruction dispatcher is not pipelined: it fetches, then executes one instruction at a time.
- The LEAD floor on time points, the conflict rule, and the drop-and-flag handling of late FIFO entries are own rules. The paper does not describe error handling.
- The rules for when FMR and SRA may proceed are this design's own. FMR waits for its own qubit's outstanding measurement; SRA waits for the whole quantum side. Any measurement sitting in an op buffer counts as outstanding for every qubit, because those words are not searched.
- Histogram tie rule: a state must be strictly more frequent to enter the top M. A state seen after all T slots are full is ignored (flagged).
- There is no separate timing queue between the time manager and the op buffers. Instructions are decoded in order, so the time point computed for a Q.Bundle is written straight into its op-buffer words.
- The measurement flag of an operation comes from its gate-op LUT entry and travels with it through the FIFOs. The measurement register marks a qubit pending when the operation is issued. It does not receive a separate command from the decoder.
- SRA and FHR are executed by the classical unit, which drives the histogram directly.
- The host processor, its software, and the analog converters are not part of the RTL.

## Verification

Every module has a self-checking testbench in `tb/` that prints `TB_RESULT checks=N failures=M`.

- **Unit tests** compare against independent models. Examples:
  - the decoder against a direct per-qubit computation;
  - the histogram against a software count and sort, including the M + 1 cycle latency and overflow;
  - the FIFOs and the dispatcher against reference queues.
- **`tb_hybrid_core`** runs the core at 16 qubits, T = 16, with a shot program of 20 shots.
- **`tb_hisepq_top`** runs the whole design through AXI4-Lite at every default: 100 qubits, 100 shots, top 4.

Both end-to-end tests use `shot_checker`. It answers every measurement with one of six fixed states drawn from a skewed distribution. It checks every issued operation:

- qubit, role and micro-code;
- the relative times 0, +2, +4 and +9 within a shot;
- exactly 70 cycles between shots;
- exactly 7 cycles between the burst operations.

Afterwards the testbenches compare the histogram in DRAM and the measurement-feedback counter with the reference. Each test also counts, and requires at least once:

- long instructions, QSet, non-zero offsets and dual-lane bundles;
- the time-point floor and timed-FIFO back-pressure;
- FMR/SRA waiting, an FMR completing while other qubits' results are still outstanding, taken branches and histogram sorting;
- LUT reprogramming and the end interrupt;
- a deliberately conflicting program that must raise `err_conflict`.

`tb_workloads` runs the benchmark circuits of the evaluation on the core at 100 qubit channels:

- Grover's operator: H and X layers, then a chain of CNOTs onto qubit 0.
- Synthetic circuits with 10, 50 and 100 % of the qubits busy per time step.
- The same circuits scaled from 8 to 96 qubits.

A small compiler in the testbench turns each time step into register loads and bundles. SMSO is used when a gate's qubits share one 8-qubit window. Otherwise it uses SMSOL, SITO or SITOL. The testbench then checks every issued operation against the circuit. Program sizes with these encodings:

| Circuit | Program size |
|---------|-------------:|
| Grover, 100 qubits | 908 B |
| Syn_10 | 620 B |
| Syn_50 | 988 B |
| Syn_100 | 1348 B |
| Grover, 8 to 96 qubits | 112 to 876 B |

All fit easily in the 16 KiB program RAM. The synthetic circuits' gate mix (a quarter of the busy qubits in CNOT pairs, the rest X/Y/Z) and their 10 layers are this testbench's choice.

`tb/hisepq_asm_pkg.sv` holds instruction encoders and the two test programs.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_hisepq_top \
    rtl/hisepq_pkg.sv tb/hisepq_asm_pkg.sv tb/tb_hisepq_top.sv
./obj_dir/Vtb_hisepq_top
```

The simulator is two-state. Every register that is read is reset.

## Files

- `rtl/hisepq_pkg.sv`: types, opcodes, register kinds and the bus request.
- `rtl/hisepq_top.sv`, `rtl/hybrid_core.sv`: the two structural levels.
- `rtl/*.sv`: one module per block, named as in the sections above.
- `tb/tb_<module>.sv`: the unit testbenches.
- `tb/tb_workloads.sv`: the benchmark circuits.
- `tb/shot_checker.sv`: the shared checker.
- `tb/hisepq_asm_pkg.sv`: encoders and programs.
