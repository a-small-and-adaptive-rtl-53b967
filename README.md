# An off-core information-flow-tracking coprocessor for an ARM SoC

Dynamic information flow tracking (DIFT) gives every register and every word of memory a *tag* that
records where its data came from, for example "read from a secret file" or "came from the network".
The tags follow the data as the program runs, and a *policy* decides which combinations are
forbidden. A classic rule is that a return address or indirect branch target must never hold
untrusted data.

On a hard-core ARM SoC such as the Zynq, the CPU pipeline cannot be changed to carry tags. This
design therefore tracks them in the FPGA fabric, beside the CPU, using three sources of
information:

1. **The hardware trace.** CoreSight PTM emits a compressed byte stream (PFT, Program Flow Trace).
   It tells which basic block the CPU entered next, and which thread was running.
2. **Compile-time annotations.** A compiler pass turns every basic block into a short list of
   tag-manipulating instructions, called *annotations*, and stores them in a reserved DDR section.
3. **Instrumentation and the kernel.** Some facts are known only at run time:
   - memory addresses held in registers, which the instrumented program stores to a reserved
     address held in `r9`;
   - file tags and buffer addresses on `read()` and `write()`, which the kernel sends.

The coprocessor replays the annotations in the order the trace gives. It keeps tags for the ARM
registers in its own register files and tags for memory in a DDR section. When a check fails, it
raises an interrupt.

Tags are 32 bits wide, so one tag can hold several policies' bits, or a multi-bit label.

## Data path at a glance

```
 PTM bytes ─► pft_decoder ─► trace_mem (2048 x 32) ─┐
                                                    ▼
 ARM AXI-Lite ─► process_mappings_ip ─────►  dispatcher (5-stage MIPS-like CPU)
                                                    │  copies each block's annotation list
                       DDR ◄─ axi_master ◄──────────┤  from the tag-annotation section
                         ▲                          ▼
                         │                   annotation_mem (1024-word ring)
                         │                          ▼
 ARM AXI-Lite ─► instrumentation_ip ───────►  tmc (5-stage tag pipeline) ─► irq
 ARM AXI-Lite ─► rfblare_ps2pl (read())  ──►   │  TRF/TRF_FP/GRF, TPR/TCR,
 ARM AXI-Lite ◄► rfblare_pl2ps (write()) ◄─►   │  tag ALU, tmmu (64 entries)
                         └──── tag memory ◄────┘
```

The blocks are wired together in `rtl/dift_top.sv`. The dispatcher, annotations memory, TMC and
AXI master are grouped in `rtl/dift_coprocessor.sv`, which also holds the dispatcher's I/O address
decoder.

Three things sit outside the top and appear only as its ports:
- the ARM core;
- the AXI interconnect in front of the four AXI-Lite IPs (each IP has its own port instead);
- the DDR.

The DDR is split as 384 MB of CPU memory, 64 MB of tag annotations and 64 MB of tag memory. In
`dift_pkg`, the tag-annotation section starts at `0x1800_0000` and tag memory at `0x1C00_0000`.

## From trace bytes to basic-block addresses (`pft_decoder`)

The decoder takes raw, unformatted PTM bytes, one byte per cycle. It looks for an A-sync
(five `00` bytes followed by `80`), then decodes these packets:

| Packet | Header | Body | Used for |
|---|---|---|---|
| I-sync | `08` | 4 address bytes, 1 information byte, 4 context-ID bytes | full address and context ID |
| Branch address | bit 0 = 1 | up to 5 bytes; each byte's bit 7 says whether another follows | new address (see below) |
| Exception return | — | — | skipped |
| Context ID | `6E` | 4 bytes | context ID |

A branch packet's first byte carries address bits [7:2], and each further byte carries more bits.
The bits that are present replace the low part of the last known address.

Each decoded address is written to the trace ring as `{addr[31:2], thread}`. The two low bits of an
ARM address are always zero, so they hold a thread number instead:
- The first context ID seen becomes thread 0, the next new one thread 1, and so on up to four.
- The full context IDs are kept in registers that the dispatcher can read, so that an interrupt
  handler can tell which process to kill.
- Example: an I-sync to `0x10574` from the second thread is stored as `0x00010575`.

The ring's write count is an output, and the dispatcher returns how many entries it has consumed.
An entry that would overwrite unread data is dropped, and a sticky `overflow` flag is set.

## The dispatcher and its program

The dispatcher is a small five-stage MIPS-style integer CPU:
- no delay slots and no multiplier;
- branches resolve in execute and flush two instructions;
- hazards interlock instead of forwarding.

Its program lives in a local instruction memory, written through the `imem_*` port while `run` is
low. Every load and store goes through one request/acknowledge bus, and the whole pipeline stops
until the access is acknowledged. The bus is decoded as follows:

| Address | Target |
|---|---|
| `0x8000_0000` and up | DDR through the AXI master (DDR address = addr[30:0]) |
| `0x1000_0000 + 4i` | decoded trace entry i |
| `0x2000_0000` | push an annotation (held while the ring is full); `+4` reads free slots |
| `0x3000_0000` / `_0004` / `_0008` | trace write count / read count / overflow flag |
| `0x3000_0010 + 4k`, `0x3000_0020` | context ID k; current thread |
| `0x4000_0000 + 4i` | process mapping register i |
| `0x5000_0100`, then `0x5000_0000 + 4i` | stage {page-granular, vpn}, then write TMMU entry i with its ppn |
| `0x5000_0200` | invalidate the TMMU |
| `0x6000_0000 + 4c`, `0x6000_0010 + 4c` | TPR[c], TCR[c] |
| `0x6000_0020`…`_002C` | clear flags, status, failing annotation, violation count |
| `0x7000_0000` / `_0004` | pending `write()` buffer address / size |

Finding the annotations of a basic block is software, so the layout of the tag-annotation section
is a convention between the compiler and the dispatch program. The program in
`tb/tb_dift_top.sv` uses a directory layout:
- a word at `section + (block − text_base)` holds a pointer to the block's list, or 0 if it has
  none;
- the list is a count followed by that many annotation words.

The program first walks the 64 process-mapping registers. For each valid one it fills a TMMU
entry, placing that page's tags at consecutive tag pages. It then writes TPR and TCR, and loops:
- wait until the trace write count changes;
- read the entry and clear its thread bits;
- look up the block in the directory and push its list;
- advance the read count.

## The Tag Management Core (`tmc`)

The TMC is the part that needs the most care.

### Pipeline

It executes one annotation per cycle in five stages:

| Stage | What happens |
|---|---|
| F | fetch the annotation from the annotations memory |
| D | decode and read registers; interlock against the destinations in E and M |
| E | tag ALU; pop a word from the instrumentation FIFO when needed (stall while it is empty) |
| M | one-cycle TMMU lookup, then one bus access per tag word |
| W | register write-back and the run-time tag check |

### State

- TRF: 16 tags for `r0`–`r15`.
- TRF_FP: 32 tags for `s0`–`s31`.
- GRF: 16 plain 32-bit registers, for example addresses that compile-time annotations compute
  with.
- TPR, one 3-bit Tag ALU operation per instruction class. The classes are ALU, load/store,
  branch and FP load/store. The operations are COPY, AND, OR, XOR, CLEAR, MAX and CHECK. TPR
  resets to OR.
- TCR, one check mask per class, reset to 0.

### Two kinds of annotation

- **Run-time forms** (`TagRRR`, `TagMTR`, `TagTRM`, `TagITR`, `TagTRI`) name only an instruction
  *class*. The operation comes from `TPR[class]`. In write-back the result is checked:
  `(result & TCR[class]) != 0` is a violation. Rewriting TPR and TCR changes the policy without
  recompiling the program.
- **Compile-time forms** (`…2`, `TagKTR`, `TagTRK`) carry their operation in the annotation. They
  fail only through an explicit CHECK operation, which is an AND whose non-zero result is a
  violation.

### Annotation encoding

One 32-bit word:

| Bits | Field |
|---|---|
| [31:27] | opcode |
| [26:24] | class (run-time forms) or operation (compile-time forms) |
| [23:17] | operand A (destination, or the tag being stored) |
| [16:10] | operand B |
| [9:3] | operand C (ALU forms) |
| [9:0] | signed byte offset (memory forms) |

Each 7-bit operand is a 2-bit register-file select (TRF, TRF_FP, GRF) followed by a 5-bit index.
`TagRImm` instead carries a 17-bit immediate and a byte shift. The helper functions
`enc_alu`, `enc_mem`, `enc_imm`, `T()`, `S()` and `G()` in `dift_pkg` build these words.

### Where memory annotations get their address

| Annotations | Address |
|---|---|
| `TagMR`, `TagMTR`, `TagTRM` (and their compile-time forms) | a GRF register plus the offset |
| `TagITR`, `TagTRI` (and their compile-time forms) | the next instrumentation word plus the offset |

In both cases the virtual address is translated by the TMMU. The instrumented program must
therefore send one word, in program order, for every annotation that needs one.

The TMMU is a 64-entry associative array of {virtual page, tag page}. Each entry has a
granularity bit:
- word-granular: each 32-bit word has its own tag at `{ppn, va[11:2], 00}`;
- page-granular: the whole page shares one tag at `{ppn, 000}`.

A miss sets a sticky flag and raises the interrupt.

### Kernel exchanges

- `TagTRK` takes one `read()` message of (file tag, buffer, length). It writes the tag to every
  tag word of the buffer, one bus access per word, and into its destination register.
- `TagKTR` hands a register's tag to the PL2PS registers and acknowledges the kernel's pending
  `write()` request. The kernel polls the status word and then reads the tag.

### Violations

A violation sets `irq`, records the failing annotation and increments a count. `irq` stays high
until it is cleared through the configuration port.

## The AXI-Lite IPs

| IP | Behaviour |
|---|---|
| instrumentation | Any write pushes a word into a 64-deep FIFO. A write into a full FIFO is held on the bus. A read returns the fill level. |
| process mappings | 64 registers `{valid[31], page_granular[30], vpn[19:0]}`. The reserved bits read as 0. |
| PS2PL | Three successive writes (tag, buffer address, byte count) form one message in a 64-deep FIFO. |
| PL2PS | `0x0` buffer address, `0x4` size (writing it posts the request), `0x8` status {request pending, tag ready}, `0xC` the tag (reading it clears "tag ready"). |

## How far the RTL can be trusted

Each block in `rtl/` has a self-checking testbench in `tb/`. Each testbench compares the block
against an independent model, or against values worked out by hand. The PFT decoder is fed the
published two-thread trace example (stored values such as `0x00010575`) and random branch packets.

`tb/tb_dift_top.sv` runs the complete top at its default sizes, and it runs the real dispatch
program. Its scenario:
1. A `read()` taints a 64-byte buffer with tag 1.
2. The instrumented pair of basic blocks at `0x10168` and `0x10188` loads `r1` from that buffer.
3. A `write()` of `r1` returns tag 1 to the kernel.
4. A later `mov lr, r1; bx lr` trips the branch check and raises the interrupt.

The test counts every mechanism and fails if any of them never happens:
- dispatcher memory stalls;
- TMC interlocks;
- TMC waits for late instrumentation;
- tag-memory stalls;
- TMMU fills;
- `TagTRK` and `TagKTR`;
- a second-thread trace entry;
- the violation.

It also checks the tag memory contents word by word.

Overflow of the trace ring and back-pressure from a full annotations memory are each exercised in
their own block testbenches.

Deliberate simplifications, and places where the design goes further than its source:

- **One TMC.** The hardware for the two-thread or two-policy variant (a second TMC and a second
  annotations memory behind the same dispatcher) is not built. Thread numbers are decoded and
  stored, but with a single TMC all threads share one set of register tags.
- **Own choices.** The annotation bit encoding, the class and operation numbering, every register
  map, all FIFO and memory depths except the 64-entry TMMU and 64 mapping registers, and the
  dispatcher's address map.
- **PFT decoding.** Only the packets listed above are decoded. Cycle-accurate mode, formatted
  (TPIU-framed) trace, timestamps and Thumb address compression are not handled.
- **AXI.** The AXI master does single-beat 32-bit transfers with one access outstanding. Bus
  errors are passed back but nothing acts on them.
- **Tag traffic.** There is no cache in front of tag memory, so every memory annotation costs a
  DDR round trip.

## Simulating

Any testbench builds with plain Verilator 5, for example the full-system one:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/dift_pkg.sv tb/mips_asm_pkg.sv tb/tb_dift_top.sv -y rtl -y tb \
  --top-module tb_dift_top -Mdir obj_top -o sim
./obj_top/sim +verilator+rand+reset+2
```

Each testbench prints `TB_RESULT checks=N failures=M`. Each has a watchdog that ends the run with
a failure if it hangs.

Helpers in `tb/`:
- `axi_ddr_model.sv`: a sparse DDR with fixed latency;
- `axil_master_bfm.sv`: AXI-Lite write and read tasks;
- `mips_asm_pkg.sv`: functions that assemble dispatcher instructions, such as `LW(rt, off, rs)`
  and `BEQ(rs, rt, off)`;
- `tb_common.svh`: the check, watchdog and result macros.

To try another policy, change the TPR and TCR writes in the dispatch program. To try another
program, change the annotation lists that `tb_dift_top` places in DDR.
