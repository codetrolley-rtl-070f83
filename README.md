# CodeTrolley: a RISC-V pipeline that undoes branch obfuscation in hardware

Control-flow obfuscation tries to stop an attacker from reading a program's
logic out of its binary. This design takes a key-based approach. At compile
time, every conditional branch is either kept or *reversed* (`beq` becomes
`bne`, `blt` becomes `bge`, and so on). The choice for each branch is a
one-bit keyed hash of the branch's address and a secret program key. The
binary therefore describes a control flow that differs from the real one in a
pattern only the key reveals. The processor holds the key. As it runs, it
recomputes the bit for every branch it executes and XORs it with the branch
condition, so each branch goes the way the original program meant. Without
the key, static analysis cannot tell which branches have been reversed. The
same binary run on a core with the wrong key, or with no deobfuscation,
computes the wrong result.

The cost is the hash. A hash that takes 8 or 16 cycles would otherwise stall
every branch. The design hides most of that cost in two ways:

* **Early start.** The hash starts while the branch is still in Decode.
* **Hash cache.** A 256-line, direct-mapped cache keeps the bits of branches
  already seen. Loops hit it almost every time, and a hit costs nothing.

This repository gives synthesizable SystemVerilog for the core, for the
deobfuscation hardware, and for self-checking testbenches.

## The pipeline

`codetrolley_top` is a seven-stage, in-order RV32I pipeline:

| stage     | what happens there |
|-----------|--------------------|
| Fetch 1   | PC register and next-PC mux (PC+4, branch/JAL target, JALR target); the instruction memory is addressed |
| Fetch 2   | the instruction word comes out of the instruction memory (synchronous read) |
| Decode    | `control_unit` decodes; `regfile` is read; `hazard_unit` checks operands; the **hash is started and the hash cache is looked up** |
| Execute   | operand mux and `alu`; branch condition **XOR hash bit**; branches and jumps resolve here |
| Memory 1  | data memory addressed; stores write |
| Memory 2  | the load word comes out of the data memory |
| Writeback | byte/half extraction, write-back mux, register write |

Other details:

* **Branch prediction.** Branches are predicted not taken. A taken branch
  or a jump leaving Execute loads the PC with the target and kills Fetch 2
  and Decode, so each redirect costs three cycles.
* **No forwarding.** An instruction waits in Decode until every older
  instruction that writes one of its source registers has reached Writeback.
  The register file passes a value written in the same cycle straight
  through to the read.
* **Halting.** `ECALL`/`EBREAK` stops fetching when it leaves Execute, and
  raises `halted` when it retires.
* **Illegal encodings.** These run as no-ops and set `illegal_seen`.

### Stalling for the hash

Execute cannot resolve a conditional branch until its hash bit is known. While
it waits, Fetch 1 through Execute hold and bubbles enter Memory 1. Older
instructions drain normally.

There is one hash unit (`branch_hash`). It belongs to at most one branch at a
time: the branch in Decode, or the branch in Execute. The flow is:

1. **Branch reaches Decode.** The cache is looked up in the same cycle.
   * **Hit:** the bit is registered along with the branch and is ready in
     Execute the moment the branch arrives.
   * **Miss:** if the hash unit is free, or is being released in that same
     cycle, the hash starts. Otherwise the branch waits in Decode behind an
     older branch that is itself waiting in Execute.
2. **Hash timing.** A hash started in cycle *t* produces its bit in cycle
   *t + H*, where *H* is `HASH_CYCLES`. A miss that spends one cycle in
   Decode therefore waits *H − 1* cycles in Execute. Each extra cycle it
   spends in Decode (for example on an operand interlock) hides one more
   cycle of the hash.
3. **Cache fill.** The bit is written into the cache in the first cycle it
   is valid.
4. **Abort.** If a redirect or a halt kills the Decode branch, its hash is
   aborted.

`deobf_unit` holds all of this: the hash unit, the cache, the owner tracking
and the XOR.

### Configurations

`DEOBF_MODE` selects one of three behaviours. The default is the proposed
design.

* **`MODE_CACHED` (default).** Hash plus hash cache, as described above.
* **`MODE_STALLED`.** Hash without the cache: every branch pays the hash
  latency. Kept for comparison.
* **`MODE_BASELINE`.** No hash at all. Kept for comparison.

`HASH_CYCLES` (default 16; 8 is the other evaluated value) sets the hash
latency. `CACHE_LINES` (default 256) sets the cache size.

## The hash and the key

`branch_hash` computes one bit from the branch address and a 64-bit key.
Each cycle it runs one add-rotate-xor round, `HASH_CYCLES` rounds in all.
The key is split into words `k0` (bits 31:0) and `k1` (bits 63:32):

```
v0 = pc ^ k0            v1 = k1 ^ 0x9E3779B9
round r = 0 .. H-1:
  t  = v0 + v1 + (r odd ? k1 : k0)
  v1 = rotl(v1, 7) ^ t
  v0 = rotl(t, 13) ^ {4{r[7:0]}}
bit = parity(v0 ^ v1)
```

This function is a placeholder chosen for its small size. It is **not** a
vetted cryptographic function. The point of the design is that any
one-bit keyed hash can sit behind the `start` / `valid` / `result` interface.
A real implementation should put a proper keyed PRF there. Note that the
round count is also the latency, so changing `HASH_CYCLES` changes the
function, and binaries must be obfuscated for the latency they will run at.

The key is loaded into a key register through `key_in`/`key_we`, and loading
it empties the hash cache. Where the key comes from is outside this design: a
fuse bank, a PUF, or a secure boot loader would drive these two signals. The
key register has no reset, so load it before the first run.

### Obfuscating a program

The compiler side is not hardware and is not included. The transformation is
small: for every conditional branch at byte address `A`, if
`hash(A, key) == 1`, flip bit 12 of the instruction (bit 0 of `funct3`). That
turns BEQ↔BNE, BLT↔BGE and BLTU↔BGEU, each the exact negation of the other.
`tb/tb_rv_pkg.sv` contains this transformation (`obfuscate`). It also holds an
independent reference model of the hash (`ref_hash`) and an RV32I encoder
used to write the test programs.

## Host interface and counters

* **Loading and reading memory.** While `rst_n` is low, the host ports own
  both memories:
  * `host_imem_we` with `host_addr`/`host_wdata` writes program words.
  * `host_dmem_req`/`host_dmem_we` read or write data words.
  * Read data appears on `host_dmem_rdata` one cycle after a read request.
* **Reset.** Releasing `rst_n` starts execution at `RESET_PC` (default 0).
  Resetting again leaves the memories intact, so results can be read back.
* **Counters.** `perf` (type `ct_pkg::perf_t`) counts cycles until halt,
  retired instructions, resolved branches, branches whose bit was 1, hash
  stall cycles, operand-interlock cycles, cache hits and misses, and
  redirects.

Memories are 1024 words each (4 KiB) by default, `IMEM_DEPTH`/`DMEM_DEPTH`.

## Files

| file | contents |
|------|----------|
| `rtl/ct_pkg.sv` | opcodes, ALU and select encodings, decoded control struct, modes, counter struct |
| `rtl/codetrolley_top.sv` | the pipeline (top) |
| `rtl/deobf_unit.sv` | hash start/ownership, cache lookup and fill, Execute stall, XOR |
| `rtl/branch_hash.sv` | iterative keyed one-bit hash |
| `rtl/hash_cache.sv` | direct-mapped cache of hash bits (index `pc[9:2]`, tag `pc[31:10]`) |
| `rtl/control_unit.sv`, `alu.sv`, `regfile.sv`, `hazard_unit.sv` | decoder, ALU + branch compare, register file, RAW interlock |
| `rtl/imem.sv`, `rtl/dmem.sv` | memories with one-cycle synchronous read |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the two system tests below |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ct_pkg.sv tb/tb_rv_pkg.sv \
    rtl/*.sv tb/tb_codetrolley_top.sv --top-module tb_codetrolley_top
./obj_dir/Vtb_codetrolley_top
```

* **`tb_codetrolley_top`** runs six cores side by side on one array-walking
  program. The program has BEQ, BNE, BGEU and BLT branches, a call and
  return, and word and byte memory traffic. The six cores are:
  * baseline;
  * stalled-hash with 8- and with 16-cycle hashes;
  * cached-hash with 8- and with 16-cycle hashes;
  * one core loaded with a wrong key.

  The testbench computes the expected memory image from the input array
  directly. It checks that every correctly keyed core reproduces it, that
  the wrong-key core does not, and that the wrong-key core does after the
  right key is loaded. It also checks the cycle ordering: baseline <
  cached < stalled, and 8-cycle ≤ 16-cycle. Finally it checks that every
  mechanism occurred: hash stall, cache hit and miss, reversed branch,
  interlock, redirect, halt and key reload. A typical result (cycles):
  baseline 907; stalled 1319 (8-cycle) and 1999 (16-cycle); cached 926 and
  958.
* **`tb_full_size`** runs the design at its default parameters. It sorts
  200 signed words with an obfuscated insertion sort (about 215,000 cycles,
  21,000 branches) and checks the result. The hash cache misses three times,
  once per static branch, and hash stalls are 0.02 % of the cycles.
* **`tb_deobf_unit`** checks the exact stall timing:
  * *H − 1* cycles for a miss;
  * 0 cycles for a hit;
  * the hiding effect of extra cycles in Decode;
  * back-to-back misses;
  * aborts and cache flush.
* **`tb_branch_hash`** checks that the hash latency is exactly 8 or 16
  cycles.

For reference, the published evaluation of this architecture used six
PARSEC applications (Blackscholes, Bodytrack, Cholesky, Ferret, FFT,
Fluidanimate). It reported slowdowns of up to about 60 % for a 16-cycle hash
without a cache, and a few percent with the 256-line cache. Those programs
need an operating system, floating point and far more than 4 KiB of memory,
so they cannot run on this core as configured. The testbench kernels print
normalized runtimes in the same form: stalled 1.45 (8-cycle) and 2.20
(16-cycle); cached 1.02 and 1.06.

Branch-heavy toy programs exaggerate the stalled-hash cost compared with
full applications. The ordering of the configurations matches what the
design is meant to achieve; the absolute percentages are those of these
small kernels.

## Where this RTL makes its own choices

The following were design decisions, not given by the source description of
the architecture:

* **Instruction set.** RV32I without CSRs, interrupts or FENCE semantics.
  `ECALL`/`EBREAK` halt the core.
* **Hazards.** No forwarding; a pure interlock. The pipeline figures of the
  architecture show no bypass paths.
* **Jumps.** JAL, JALR and branches all resolve in Execute. The
  architecture's figure also routes instruction-derived target lines to the
  PC mux, which suggests jumps could be redirected earlier. Resolving them
  in Execute costs one extra cycle per JAL (three lost fetch slots instead
  of two) but keeps a single redirect point.
* **Hash.** The hash function, the 64-bit key, and the rule that a cache
  hit suppresses the hash start. The source says the hash starts "in
  parallel" with the lookup; suppressing it on a hit is equivalent in
  timing and leaves the unit free.
* **Cache.** The index/tag split, the fill timing and the flush on key load.
* **Memories.** Sizes, one-cycle synchronous reads, the host ports and the
  key register.
* **Not included.** The mask-based alternative (one extra instruction bit
  per branch) is not built.

