# A parallel quantum control processor: multiprocessor, quantum superscalar and fast context switch

A control processor for superconducting qubits turns a compiled quantum program into a stream
of timed codewords for the analog electronics (microwave pulses, flux pulses, readout triggers),
and it reacts to measurement results coming back from the acquisition boards. Two things make
it slow, and this design tackles both:

* **Feedback stalls the whole machine.** When a program waits for a measurement result (a few
  hundred nanoseconds) every unrelated qubit waits too. This design runs independent parts of
  the program ("program blocks") on several processors at once, with a hardware scheduler that
  hands blocks to processors at run time and prefetches the next block so that a processor can
  switch to it within a few cycles. Small feedback steps ("if qubit r measured 1, apply op1 to
  qubit t, else op0") do not even need a block of their own: a single MRCE instruction parks
  them in a context register while the processor carries on.
* **One instruction per cycle is not enough.** A circuit step on many qubits needs one
  instruction per gate. If the processor handles one instruction per cycle, a step on 8 qubits
  takes 8 cycles although the gates themselves may take only 2. Each processor here is a W-way
  *quantum superscalar*: it fetches W instructions per cycle and dispatches all gates of one time
  point together, while classical instructions go down their own pipeline.

All RTL is in `rtl/` (SystemVerilog, one module or package per file), the testbenches are in
`tb/`. The defaults describe the full machine: 6 processors, 8 ways, 64 qubits, a 64-entry block
table.

## Block map

```
 host ──► instr_mem (4096 x 32) ◄── scheduler ──► block_info_table (64 x 32)
              │                       │  status regs, priority counter
              │ one word/cycle        │ proc_start / proc_bank / proc_done
              ▼                       ▼
        ┌─ private_icache (2 banks) ─ processor 0 ─┐
        ├─ private_icache (2 banks) ─ processor 1 ─┤   per-qubit ops
        │            ...                  ...      ├──────────────► emitter ──► microwave / flux /
        └─ private_icache (2 banks) ─ processor 5 ─┘                            readout channels
                     ▲          ▲
    shared_regs ─────┘          └──── meas_result_reg ◄── acquisition (daq_valid/daq_value)

 processor:
   instr_fetch ─► predecoder ─┬─► classical_pipeline (ALU, CMP/BR, FMR, LDS/STS, register_file)
     (W instr/cycle)          ├─► quantum_pipeline x W (decode + FIFO) ─► op_combiner ─► ops
                              │        ▲ pop
                              ├─► timing_manager (timing queue + controller)
                              └─► mrce_unit (context registers) ─────────────► ops (merged)
```

`quape_top` wires all of this; the host link and the analog boards are outside it and appear as
ports (`imem_*`, `bit_*`, `num_blocks`, `start` from the host; `daq_*` from the acquisition side;
`mw_*`, `flux_*`, `ro_trig` to the waveform side).

## Instruction set

All instructions are 32 bits, opcode in `[31:26]`. Field positions are this design's choice
except that MRCE keeps the field order opcode, result qubit, target qubit, op0, op1.

| Instruction | Fields | Meaning |
|---|---|---|
| `QOP label, op, q0, q1` | `010000 label[25:19] op[18:12] q0[11:6] q1[5:0]` | quantum operation; `op[6]=1` is a two-qubit gate on (q0,q1); `op=0x3F` measures q0 |
| `MRCE qr, qt, op0, op1` | `010001 qr[25:20] qt[19:14] op0[13:7] op1[6:0]` | when qubit qr's result is valid, apply op1 (result 1) or op0 (result 0) to qt |
| `ADD/SUB/AND/OR/XOR rd, rs, rt` | `op rd[25:22] rs[21:18] rt[17:14]` | ALU |
| `ADDI rd, rs, imm14` | same, `imm[13:0]` | add immediate |
| `LDI rd, imm22` | `rd[25:22] imm[21:0]` | load sign-extended immediate |
| `CMP rs, rt` | `rs[21:18] rt[17:14]` | set the equal and less-than flags |
| `BR cond, target` | `cond[25:22] target[11:0]` | branch (always, eq, ne, lt, ge) to a block-relative address |
| `FMR rd, q` | `rd[25:22] q[5:0]` | copy qubit q's measurement result into rd; waits until it is valid |
| `LDS rd, s` / `STS rs, s` | `rd[25:22] rs[21:18] s[3:0]` | load / store shared register s |

`quape_pkg.sv` holds the opcodes and field types; `tb/quape_enc_pkg.sv` has builder functions
(`enc_qop`, `enc_mrce`, ...) that the testbenches use to write programs.

**Timing labels.** A QOP's label is the number of cycles between the previous circuit step and
the step this QOP starts. QOPs with label 0 that follow a QOP belong to the same step: they start
at the same time point. So

```
QOP 0, X, q0      ; step A
QOP 0, X, q1      ; step A (same time)
QOP 5, CZ, q0,q1  ; step B, 5 cycles after A
QOP 0, MEAS, q2   ; step B
```

issues X on q0 and q1 together, and the CZ and the measurement together five cycles later.

## Program blocks and the scheduler

The compiler splits a program into blocks and writes one 32-bit entry per block into the block
information table: `pc_start[31:20] | pc_end[19:8] | priority[7:0]` (end inclusive).
Priorities express dependency: every block of priority *p* must be done before a block of
priority *p+1* may start; blocks of equal priority may run in parallel.

The scheduler (`scheduler.sv`) keeps a 2-bit status register per block — *wait*, *prefetch*,
*in execution*, *done* — and a priority counter. After `start` it reads one table entry per
cycle, over and over:

1. **Allocation.** A *wait* block whose priority equals the counter, with a processor free, is
   copied word by word from the instruction memory into one bank of that processor's private
   cache (one cycle per instruction; the scheduler serves nothing else meanwhile). The
   processor is started on that bank and the block becomes *in execution*.
2. **Prefetch.** Once a full pass has seen every block of the current priority started, a
   *wait* block of the next priority is copied into the *second* bank of a running processor
   (or into an idle one) and becomes *prefetch*.
3. **Completion and switch.** A processor's `done` pulse marks its block *done* and frees its
   bank. When no processor still runs a block of the current priority the counter advances, and
   a processor holding a prefetched block of the new priority is started on that bank straight
   away — no copy on the critical path. The testbench measures this switch at no more than three
   cycles after the last `done`.
4. When every block is done, `all_done` rises.

Processors are chosen lowest index first, and a processor holds at most one prefetched block.

## Inside a processor

### Fetch and the pre-decoder

`instr_fetch` holds a block-relative PC and offers the next W instructions of the selected cache
bank each cycle. The pre-decoder (`predecoder.sv`) takes as many as fit into its buffer
(2W entries) and makes two independent dispatch decisions per cycle. This is the part of the
design with the most rules:

* **Quantum step.** From the buffer head it collects the leading QOP and the QOPs right behind
  it with label 0, stopping at the first classical instruction ("parallel until classical"), at
  a QOP with a non-zero label, at a QOP on a qubit reserved by a pending MRCE, or after W QOPs.
  The step is dispatched (one QOP per quantum way, plus its label and way mask to the timing
  queue) only once it is *closed*: it is W long, something else is buffered behind it, or the
  whole block has been fetched. An open step waits for the next fetch, so a step whose QOPs
  arrive over two fetch cycles still leaves as one (*recombination*). A step longer than W spills
  into the next cycle.
* **Classical instruction.** The oldest classical instruction may leave in the same cycle, even
  while older QOPs are still buffered (*lookahead*). A branch is therefore resolved while its
  preceding quantum step is still being collected. A taken branch drops the younger buffered
  instructions and reloads the PC. FMR and MRCE depend on measurements issued by earlier
  QOPs, so they only leave from the buffer head.
* **MRCE** goes to the context-switch unit instead of the classical pipeline.

Counters `lookahead_count`, `recombine_count` and `dep_stall_count` record how often each case
happened.

### Timing

Every dispatched step sits in its ways' FIFOs (`quantum_pipeline.sv`) while its label and way
mask wait in the timing queue (`timing_manager.sv`). The timing controller counts cycles since
the previous issue; when the count reaches the head's label it pops the step and all its ways
release their operations in the same cycle. The first step of a block issues as soon as it
arrives. A step that arrives after its time is issued at once and counted in `late_count` —
this is the case where instruction supply cannot keep up with the quantum timeline.
`op_combiner.sv` scatters the released operations onto a per-qubit vector (a two-qubit gate
occupies both qubits).

### Feedback: FMR and MRCE

`FMR` stalls the classical pipeline until the measurement result register holds a valid result
for its qubit; combined with `CMP`/`BR` it gives arbitrary feedback, at the cost of the wait.
The result register (`meas_result_reg.sv`) has a valid bit per qubit, set by the acquisition
side and cleared when a new measurement of that qubit is dispatched.

`MRCE` stores (result qubit, target qubit, op0, op1) in one of four context registers
(`mrce_unit.sv`) and marks both qubits as reserved. The processor goes on with everything that
does not touch those qubits; a step that does is held in the pre-decoder. When the result turns
valid, the unit emits op0 or op1 on the target qubit one cycle later and frees the context.

### Shared registers and the emitter

`shared_regs.sv` provides 16 registers that all processors can load and store, one access per
cycle (lowest processor index wins, others stall), for handing values between blocks.
`emitter.sv` merges the operation vectors of all processors and routes each operation to the
microwave channel (single-qubit gates), the flux channel (two-qubit gates) or the readout trigger
(measurements) of its qubit, registered, one cycle after issue. If two processors drive one qubit
in one cycle the lower index wins and `collision_count` counts it.

## Parameters

| Parameter | Default | Where |
|---|---|---|
| `NPROC` | 6 | processors (`quape_top`, `scheduler`, `emitter`, `shared_regs`) |
| `WAYS` | 8 | superscalar width |
| `NQ` | 64 | qubits |
| `NBLK` | 64 | block table entries |
| `IMEM_DEPTH` | 4096 | instruction memory words |
| `CACHE_DEPTH` | 256 | words per private cache bank |
| `BUF` | 2·WAYS | pre-decoder buffer |
| `QDEPTH` | 16 | FIFO depth per way and of the timing queue |
| `NCTX` | 4 | MRCE contexts per processor |

The 6 processors, 8 ways and the 64 x 32-bit table follow the published prototype; the other
sizes are choices of this design.

## Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/quape_pkg.sv tb/tb_quape_top.sv --top-module tb_quape_top
./obj_dir/Vtb_quape_top
```

`tb_quape_top` runs the whole machine at its default size: six blocks of three priorities
exercising wide steps, spill-over, FMR feedback with a branch, MRCE, shared registers,
allocation, prefetch and bank switch, with a model of the acquisition side that answers each
readout trigger with a random bit 15 cycles later. It checks codeword timing and values and fails
if any of the mechanisms never happened. The unit testbenches override sizes (e.g. 4 ways, 16
qubits) to keep their programs short.

## Where this design departs from the published one

* Only the priority form of block dependency is built. Direct dependency vectors (one bit per
  block) are not.
* The instruction encoding, register counts, cache, FIFO and buffer depths are this design's.
* The pre-decoder takes fetched instructions while it has free buffer entries, rather than
  stalling fetch until the buffer drains.
* An MRCE result leaves one cycle after the result is valid. The prototype reports three
  cycles per switch.
* The emitter uses a fixed microwave, flux and readout channel per qubit. The prototype
  hard-codes the wiring of its own chip (38 channels for 10 qubits).
* The host link, the waveform and acquisition boards and the test-only random measurement
  source are not part of the RTL. Their signals are the top-level ports.
* FMR and MRCE never overtake buffered QOPs. The published description does not say how a
  lookahead FMR would be kept from reading a stale result.
* If an MRCE result and a scheduled gate land on the same qubit in the same cycle, the gate
  wins and the MRCE operation is dropped and counted in `mrce_clash_count`. This can only
  happen when a gate on the MRCE target was dispatched before the MRCE, because later gates
  on that qubit are held back until the MRCE resolves.
