# ASRPU in SystemVerilog: a programmable processing unit for speech recognition

Speech recognisers differ a lot in their details, such as the features they extract, the
layers of their neural network and how they search for the transcription. But they all
run the same loop on each chunk of audio:

1. Turn the samples into feature frames.
2. Score the frames with an acoustic model.
3. Expand the surviving transcription hypotheses with the new scores, and prune the weak ones.

ASRPU keeps every algorithm in software, written as small parallel *kernels* that run on a
pool of simple RISC-V cores. Hardware takes over only the parts that every recogniser shares:

- running the kernels of a step in order;
- starting one thread per output;
- holding the hypothesis set, merging duplicates and pruning by a beam.

This repository holds RTL for that organisation. The organisation, the command set and
the default sizes come from the ASRPU paper, "ASRPU: A Programmable Accelerator for
Low-Power Automatic Speech Recognition". The paper describes behaviour but not circuits,
so all micro-architecture, encodings and protocols here are this implementation's own.

## 1. The programming model the hardware enforces

The host CPU configures the unit once, then issues one `DecodingStep` per chunk of signal.
A step has two phases.

**Acoustic scoring** runs kernels 0 … N-1 one after the other. Each kernel comes with a
*setup program*, which runs as a single thread before the kernel. The setup program
inspects the buffers in shared memory, starts DMA copies of model data, and *notifies* a
number:

- a number *T > 0*: the kernel is launched as *T* threads, and thread *t* receives *t*
  in `a0`;
- zero: there is not enough input yet, so the step stops after the kernel that is
  currently running. The next step starts again from kernel 0.

**Hypothesis expansion** runs a single kernel. Its setup program notifies how many times
the kernel must run; in speech this is one run per new score frame. Each run starts one
thread per *active* hypothesis. Thread *i* receives the hypothesis index in `a0` and the
run number in `a1`. It reads hypothesis *i*, and pushes its successors to the hypothesis
unit. Once every thread of the run has finished, the pushed ("new") set becomes the active
set.

Setup threads overlap with kernel threads:

- The setup of kernel *k+1* is started together with the threads of kernel *k*, once
  the threads of kernel *k-1* have drained and the setup of kernel *k* has returned. It
  therefore runs beside the threads of kernel *k*. Its DMA copy and its buffer checks are then
  hidden behind that kernel.
- The expansion setup runs beside the last acoustic kernel.
- A setup thread always gets the lowest idle PE, ahead of any kernel thread.

### Host commands (`cmd_decoder`)

The host drives a valid/ready handshake with `cmd_op` and three 32-bit arguments. A command
is refused (`cmd_ready` low) while a step runs.

| op | command | arguments | effect |
|---|---|---|---|
| 0 | ConfigureASR_AcousticScoring | n, setup_addr, kernel_addr | write entry *n* of the configuration memory; kernel count = largest *n* + 1 |
| 1 | ConfigureASR_HypExpansion | –, setup_addr, kernel_addr | write the expansion entry |
| 2 | ConfigureBeamWidth | beam | signed 32-bit beam of the hypothesis unit |
| 3 | CleanDecoding | – | empty both hypothesis sets |
| 4 | DecodingStep | signal_addr | latch the address, start a step |

Notes:

- The paper's command table gives the expansion command only a kernel address, but its
  text gives the expansion kernel a setup program as well. This design follows the text.
- An acoustic kernel index ≥ `MAX_KERNELS` sets the sticky `cmd_error` flag.
- Every configuration write flushes all instruction caches, so reloaded programs are seen.

### What a thread sees

| Address (data bus) | Meaning |
|---|---|
| `0x0000_0000` + offset | shared memory, 512 KB scratchpad (kernel buffers, parameters) |
| `0x1000_0000` + offset | model memory, 1 MB, filled by the DMA |
| `0x2000_0000` + reg | hypothesis unit (below) |
| `0x3000_0000` + reg | DMA: `+0` SRC (external byte address), `+4` DST (model-memory address), `+8` LEN (words), `+C` GO (write starts; read returns busy) |
| `0x4000_0000` | `signal_addr` of the current step; `+4` the beam |
| `0xF000_0000` | store here = notify the controller (last value before the thread ends counts) |

Instruction addresses are external-memory addresses. A thread ends with `ECALL` (or
`EBREAK`).

Vector extension: custom-0 opcode `0001011`, with `funct3` selecting the operation. There
are 32 vector registers of 8 × int8.

| funct3 | operation |
|---|---|
| 0 VMAC | `x[rd] += Σ v[rs1]ᵢ · v[rs2]ᵢ` (signed 8-bit, 32-bit accumulator) |
| 1 VMUL | `v[rd] = v[rs1] ⊙ v[rs2]` (low 8 bits) |
| 2 VADD | `v[rd] = v[rs1] + v[rs2]` (per lane, wrapping) |
| 3 VACUM | `x[rd] = x[rs1] + Σ v[rs2]ᵢ` |
| 4 VLD | `v[rd] = mem64[x[rs1]]` (two bus words) |
| 5 VST | `mem64[x[rs1]] = v[rs2]` |
| 6 I2F | `x[rd] = float(x[rs1])`, IEEE single precision, round to nearest even |

## 2. The hypothesis unit (`hyp_ctrl` + `hyp_mem`)

This is the most involved block.

**Record format.** A hypothesis is a 16-byte record: a 32-bit hash that identifies it, a
signed 32-bit score (higher is better), and two free 32-bit fields. The free fields can
hold, for example, a back-link or a graph node.

**Memory layout.** The 24 KB memory is split in two halves of 768 records each: the
*active* set and the *new* set.

**Pushing a record.** Threads push through per-PE staging registers, so that eight PEs can
build records at the same time without interfering:

```
+0x00 STG_HASH   +0x04 STG_SCORE   +0x08 STG_D0   +0x0C STG_D1    (per PE, write)
+0x10 PUSH   write: insert the staged record into the new set
+0x14 SEED   write: append the staged record to the active set (first step)
+0x20 ACT_COUNT, +0x24 NEW_COUNT                                  (read)
+0x8000 + 16·i + 4·field   active record i                        (read)
```

The bus tells the unit which PE is writing (`req.id` is set by the bus arbiter). A push
then walks the new set, two cycles per record, and resolves to one of four outcomes:

1. **Prune.** The score is below *best − beam*, where *best* is the best score in the new
   set so far. The record is dropped.
2. **Merge.** A record with the same hash exists. The better score and its fields are kept.
3. **Append.** Otherwise the record is appended.
4. **Evict.** The set is full. The record replaces the worst record, if it is better than
   that record.

The bus response to PUSH comes only after the insert is done. A thread's next access
therefore sees the updated set.

**End of a run.** The controller asks for a *swap*. Every new record whose score is within
the beam of the final best is copied into the active half, a few cycles per record.

**Sorting.** The paper says the unit "sorts and prunes". Here the set is kept unsorted:
after the merges and the beam filter, the order of the records carries no information the
expansion kernel needs.

**Result is independent of order.** If the new set does not overflow, the final active
set does not depend on the order in which threads push. It is exactly "the best record per
hash, within the beam of the best". When the set does overflow, the survivors depend on
arrival order. The best record is never evicted, however.

## 3. The ASR controller (`asr_controller`)

The controller keeps a busy mask of the PEs and starts at most one thread per cycle, on the
lowest idle PE. A start is a one-cycle `pe_start[i]` pulse carrying `{pc, a0, a1}`. A PE
reports `done` when its thread ends, and `notify_valid/value` when it stores to the notify
address.

One decoding step goes through these states:

```
IDLE → FETCH (config entry k) → LATCH → RUN: start setup(k) if its turn, start
kernel(k-1) threads while any are left, wait; when kernel k-1 drained and setup k
returned → k+1 …
  setup returned 0 → wait for the running kernel → FINISH (step_stopped)
  all acoustic kernels done and expansion setup returned R →
HE_START (read ACT_COUNT) → HE_RUN (one thread per active hypothesis) →
HE_SWAP (wait for the hypothesis unit) → repeat R times → FINISH (step_done)
```

The `a0` value of each thread type:

| Thread | `a0` |
|---|---|
| acoustic setup | kernel index |
| expansion setup | number of acoustic kernels |
| kernel thread | thread index |

Event outputs count three things:

- a setup overlapping kernel threads;
- work waiting with every PE busy;
- an expansion run starting.

## 4. The PE (`pe`)

The PE is a small multi-cycle RV32I core:

- **Fetch** goes through a private 4 KB i-cache. A hit costs two cycles.
- **Execute** takes one cycle.
- **Memory** waits for the data bus. A vector load or store takes two beats.

The core has no CSRs, interrupts or privilege modes. FENCE does nothing. Stores are whole
words only; loads of bytes and halves are supported. An unknown opcode ends the thread and
raises `illegal`.

Measured speed: with a warm cache the core needs about four cycles per instruction
(232 cycles for a 59-instruction test thread).

The paper's performance numbers assume one instruction per cycle. This core is a correct
but slow stand-in for that core.

## 5. Memories and buses

- **Data bus.** One round-robin arbiter (`bus_arbiter`) joins the PEs to the address
  decoder. It carries one transaction at a time.
  - A master holds `req.valid` until `rsp.rvalid`.
  - The slave sees a one-cycle `valid`, plus `id` = the master's index.
  - Slaves answer exactly once. Shared and model memory answer in one cycle.
- **Instruction bus.** A second arbiter of the same kind joins the PE i-cache misses to
  the 64 KB shared i-cache, which reads external memory through the `ext_i` port.
- **Caches.** Both cache sizes are direct-mapped with one-word lines, and read-only.
- **DMA.** It copies LEN words from external memory (port `ext_d`) into model memory, one
  word per external read. Its write port is separate, so PE reads of model memory go on
  in parallel.

## 6. Where this differs from the paper

Built as the paper describes:

- the three-unit organisation;
- the command set;
- setup/kernel threads with notify-a-count and stop-on-zero;
- setup overlap and the expansion setup beside the last kernel;
- one expansion thread per active hypothesis, repeated as the setup says;
- beam pruning and merging in hardware;
- vector MAC with 8 lanes;
- every size in the paper's configuration table: 8 PEs, 24 KB hypothesis memory, 64 KB
  i-cache, 512 KB shared memory, 1 MB model memory, 4 KB PE i-cache, MAC width 8.

Not built:

- The **floating-point register file and FP ALU**.
- The **special function units** (exp, log, cos).
- The **24 KB PE data caches**.
- The **LRU data-cache mode** of the model memory during hypothesis expansion. Model
  memory is a plain DMA-filled scratchpad in both phases.

Own choices:

- encodings, address map, bus protocol and cache organisation;
- the merge/prune/evict rules for the hypothesis set, and keeping it unsorted;
- the seed register;
- the controller bus is a set of point-to-point wires: start pulse, thread record, done,
  notify value;
- CleanDecoding empties the hypothesis sets only. Shared memory, model memory and the
  configuration are left as they are, so software must reset its own buffers;
- a zero-returning expansion setup stops the step like any other setup, so expansion is
  skipped and `step_stopped` is raised;
- `MAX_KERNELS` = 128. This is enough for a TDS-style model of about 80 kernels, plus
  splitting the large fully-connected layers to fit in model memory.

The paper's real-time claim cannot be reached by this RTL. The claim is about 40 ms for an
80 ms step at 500 MHz and one instruction per cycle. This RTL has about four cycles per
instruction, and no d-caches to take load off the shared data bus.

## 7. Files, parameters and simulation

Each file in `rtl/` holds one module, except `asrpu_pkg.sv`, which holds the shared
structs, enums and constants. The top is `asrpu_top`. Its parameters and their defaults:

| Parameter | Default |
|---|---|
| `NUM_PE` | 8 |
| `SHARED_BYTES` | 512 K |
| `MODEL_BYTES` | 1 M |
| `ICACHE_BYTES` | 64 K |
| `PE_ICACHE_BYTES` | 4 K |
| `HYP_BYTES` | 24 K |
| `MAX_KERNELS` | 128 |

Each block has a self-checking testbench in `tb/`, called `tb_<module>`. Helper files there:

- `ext_mem_model.sv`, a latency model of external memory;
- `rv_asm_pkg.sv`, instruction encoders.

There are two end-to-end tests, and both share `tb_asrpu_run.sv`.

**Configurations.**

- `tb_asrpu_top` uses 4 PEs, small memories and an 8-record hypothesis set, so that the
  set overflows.
- `tb_asrpu_full` uses every default.

**What they exercise.**

- Two acoustic kernels: a vector-MAC layer whose weights are DMA'd in, and a ReLU.
- An expansion kernel run three times per step, with seeding, merging and pruning.
- A step stopped by a zero-returning setup.
- A CleanDecoding, followed by more steps.

**What they check.**

- Every output value against a model computed by the test.
- The hypothesis sets against that model.
- That every mechanism occurred: bus waits, cache hits and misses, DMA words, merges,
  prunes, evictions and the rest.

Each test prints `TB_RESULT checks=… failures=…`. To simulate one:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/asrpu_pkg.sv tb/tb_asrpu_full.sv --top-module tb_asrpu_full
./obj_dir/Vtb_asrpu_full
```

The full-size run simulates five decoding steps in well under a minute.
