# Branch Landing unit: Bloom-filter source authorisation for RISC-V indirect jumps

Jump-oriented programming chains gadgets through indirect jumps (`jalr`, `jr`). A
landing-pad scheme such as CET or BTI only checks that a jump lands on a marked
instruction. It does not ask where the jump came from. Branch Landing adds that
second question. Every indirect jump carries the identity of its source section,
and every landing site checks this identity against the set of sources allowed to
reach it. Each target's set is stored as a Bloom filter. The check is therefore
a fixed number of hash probes, however many sources the target admits. A
register holding a fixed number of tag slots can only authorise a bounded number
of callers.

This repository holds synthesizable SystemVerilog for the hardware side of the
scheme: the BRState register, the decoder for the two new instructions, and a
unit that performs the membership check in three cycles when its descriptor
cache hits. The compiler pass that assigns section IDs and builds the filters is
not part of it. Neither is the RISC-V core that would host the unit.

## The two instructions and BRState

| instruction | placed by the compiler | effect |
|---|---|---|
| `bld SID` | right before each `jalr`/`jr` | `BRState.sid <= SID`, `BRState.valid <= 1`; 1 cycle |
| `brl SID_T` | at the entry of each legitimate target | fault if `valid == 0`; else fault unless `BRState.sid` is in filter `BF[SID_T]`; in both cases `valid <= 0` |

A section is a protection domain. It can be a module, a function, a basic block
or a user-defined group, at whatever granularity the compiler policy chooses.
The hardware is the same for every policy. Only the filter contents change.

**Encoding.** Both instructions are I-type in the `custom-0` major opcode
(`0001011`). `funct3 = 000` is `bld` and `funct3 = 001` is `brl`. The 12-bit
immediate is the section ID, and `rd`/`rs1` are ignored. These values are this
design's choice.

**BRState** (`brl_pkg::brstate_t`) is 32 bits: `sid` in bits [31:1] (31 bits) and
`valid` in bit 0. The register has a 31-bit `sid` field, but one instruction's
immediate is only 12 bits wide. This RTL zero-extends the immediate, so the
instructions as encoded here can name 4096 sections. A wider SID would need
another encoding, such as a second instruction or an `rs1` operand.

The validity bit makes an authorisation single-use:

* a `brl` reached without a `bld` (an attacker jumping straight to a landing site)
  faults at once;
* a successful `brl` consumes the authorisation, so it cannot be replayed at a
  second landing site;
* a failing `brl` clears it too.

Application code can write BRState only through `bld`. Privileged software saves
it through `csr_rdata` on a context switch, and restores or clears it through
`csr_we`/`csr_wdata`. If BRState is not restored, the next `brl` sees
`valid = 0` and faults. That is the fail-closed behaviour.

## Where the authorisation sets live

The metadata is read-only and laid out in memory as follows:

```
descriptor table (table_base):
  table_base + 8*SID_T + 0 : base  - byte address of the filter bit array
  table_base + 8*SID_T + 4 : m     - filter width in bits (1 .. M_MAX)
filter bit array of SID_T:
  bit p (0 <= p < m) is bit (p mod 32) of the 32-bit word at base + 4*floor(p/32)
```

A source `s` is a member of a filter of width `m` when all `K` bits at these
positions are 1:

```
p_i = (h1(s) + i * h2(s)) mod m,   i = 0 .. K-1        (double hashing)
```

`h1` and `h2` are H3 hashes: each is a 16-bit XOR of one matrix row per set bit
of the 31-bit SID,

```
h(s) = XOR over { j : s[j] = 1 } of Q[j]
```

The 31 rows of a matrix are produced by a 32-bit xorshift generator. Start from
the seed and step `x ^= x<<13; x ^= x>>17; x ^= x<<5` once per row. Row `j` is
the low 16 bits of the state after step `j+1`. The seeds are `32'h9E3779B9` for
`h1` and `32'h85EBCA6B` for `h2`, set by the parameters `SEED1` and `SEED2`. A
filter is built by setting the `K` positions of every authorised source. The
testbench package `tb/brl_ref_pkg.sv` does exactly this (`ref_insert`,
`ref_member`) and can serve as the reference for a tool that generates filters.

The expected false-positive rate is `(1 - e^(-K n / m))^K` for `n` sources. With
the defaults (`K = 4`, `m = 256`), it stays below 1e-3 for up to 12 authorised
sources per target. A target with many more sources needs a wider filter: raise
`M_MAX`.

## A `brl`, cycle by cycle

`brl_exec` runs the check. When the descriptor cache hits, it follows a
three-cycle schedule:

| cycle | state | work |
|---|---|---|
| 1 | `S_IDLE` + `start` | `BRState.valid` check; descriptor-cache tag lookup with `SID_T`. If `valid = 0`: `done`, `fault`, cause `FC_NO_BLD` in this cycle. |
| 2 | `S_HASH` | `h1`, `h2` of `BRState.sid` computed and registered; the cached entry (`m`, filter bits) read and registered |
| 3 | `S_CHECK` | `K` positions formed, the sampled bits AND-reduced; `done` with `fault = 0` (member) or `fault = 1`, `FC_NOT_MEMBER` |

The `done` cycle also raises `consume`, and BRState.valid clears at the clock
edge that ends it. Seen from the core: a `brl` accepted in cycle *n* reports its
result in cycle *n+2*, and `instr_ready` is low in cycles *n+1* and *n+2*.

**Miss path.** If the tag lookup misses, the sequencer waits in `S_REFILL` while
`desc_cache` fetches the entry from memory. It reads the two descriptor words,
then `ceil(m/32)` filter words, one request at a time. The entry is installed
and the check resumes at cycle 2. With a memory that answers two cycles after
accepting a request, a 256-bit filter costs 44 cycles. A descriptor with `m = 0`
or `m > M_MAX` is not installed, and the `brl` ends with `FC_BAD_DESC`.

**The descriptor cache** has 16 entries and is direct mapped on the low four bits
of `SID_T`. Each entry stores the tag, `m` and the whole filter (up to 256 bits),
so a hit needs no memory access at all. `dc_flush` empties it. The metadata is
read-only, so the only reason to flush is a change of address space.

**Probe arithmetic.** `bloom_probe` does not multiply. It reduces `h1` and `h2`
modulo `m` once. It then adds `h2 mod m` repeatedly and subtracts `m` when the
sum overflows. This gives exactly the positions of the formula above.

## Module map

```
brl_unit                      top: commit-stage port, CSR port, memory port
 |- brl_decoder               bld/brl recognition, immediate
 |- brstate_csr               BRState {sid, valid}
 `- brl_exec                  3-cycle brl sequencer, fault generation
     |- desc_cache            SID_T -> (m, filter), refill over the memory port
     |- sid_hash              H3 h1/h2
     `- bloom_probe           double-hash positions, AND-reduce
brl_pkg                       BRState type, fault causes, opcode constants
```

## Top-level interface (`brl_unit`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset (clears BRState and the cache) |
| `instr_valid`, `instr[31:0]` | in | instruction from the commit stage; hold until `instr_ready` |
| `instr_ready` | out | unit idle; low while a `brl` is in flight (the core stalls) |
| `done`, `fault`, `fault_cause` | out | completion of `bld` (same cycle) or `brl`; `fault_cause` is `FC_NONE`, `FC_NO_BLD`, `FC_NOT_MEMBER` or `FC_BAD_DESC` |
| `csr_we`, `csr_wdata`, `csr_rdata` | in/in/out | privileged save/restore/clear of BRState |
| `table_base[31:0]` | in | address of the descriptor table |
| `dc_flush` | in | invalidate the descriptor cache |
| `ev_dc_hit`, `ev_dc_miss` | out | one pulse per accepted `brl` with `valid = 1` |
| `mem_req_valid/ready/addr`, `mem_rsp_valid/data` | | 32-bit read port to the metadata (normally through the L1 D-cache); one outstanding request, in-order response |

The unit handles instructions at commit, so a squashed speculative `bld` never
reaches BRState. The core must turn `fault` into a control-flow-protection trap.
Instructions other than `bld`/`brl` are accepted and ignored.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `DC_ENTRIES` | 16 | descriptor-cache entries (power of two) |
| `M_MAX` | 256 | widest filter held, in bits (multiple of 32) |
| `K` | 4 | probes per check |
| `HASH_W` | 16 | width of `h1`, `h2` |
| `ADDR_W` | 32 | metadata address width |
| `SEED1`, `SEED2` | see above | H3 matrix seeds |

Only the 31-bit SID width, the double-hashing rule, the 1-cycle `bld` and the
3-cycle `brl` schedule come from the published description. The paper fixes none
of the numbers in this table.

## Verification

Every module has a self-checking testbench in `tb/`. `brl_ref_pkg` is an
independent reference model. It regenerates the H3 rows itself and computes the
positions with a wide multiply and modulo. `meta_mem` is a behavioural memory
with a configurable latency and a backdoor write port.

| testbench | what it checks |
|---|---|
| `tb_brl_decoder` | opcode/funct3 decode and immediate, random words |
| `tb_brstate_csr` | bld set, brl clear, privileged write priority, reset, against a shadow model |
| `tb_sid_hash` | h1/h2 against the reference for walking-one and random SIDs; H3 linearity |
| `tb_bloom_probe` | positions and membership against `(h1 + i*h2) mod m` for random m and filters |
| `tb_desc_cache` | miss, refill word count, hit contents, conflict eviction, bad descriptors, flush |
| `tb_brl_exec` | pass/fault causes against the reference; 1-cycle no-bld fault, 3-cycle hit, longer miss |
| `tb_brl_unit` | end to end at default parameters: legitimate transfers, bld bypass, forged source, replay, context switch with and without restore, flush, bad descriptors, back-to-back stalls; each must occur |
| `tb_brl_workloads` | synthetic transfer streams with 2, 13, 15 and 181 protected targets; no legitimate transfer may fault; average brl latency printed |

To simulate one, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/brl_pkg.sv tb/brl_ref_pkg.sv tb/tb_brl_unit.sv --top-module tb_brl_unit
./obj_dir/Vtb_brl_unit
```

Each testbench prints `TB_RESULT checks=N failures=M`. The workload run gives
these average `brl` latencies:

| workload | targets | average `brl` cycles |
|---|---|---|
| 2-target, function-level | 2 | 3.05 |
| 13-target | 13 | 3.36 |
| 15-target | 15 | 3.41 |
| 181-target, switch-heavy | 181 | 40.2 |

Only the 181-target program misses the cache almost every time. The workloads
model the target counts of benchmark programs, not their instruction streams.

## Choices made here, and departures from the published description

* **SID width.** BRState keeps a 31-bit `sid`. The I-type encoding carries only
  12 bits, so these instructions reach 4096 sections.
* **Filter size and probe count.** The source asks for a fixed filter size with a
  false-positive rate below 1e-3, but gives neither `m` nor `k`. Here `M_MAX = 256`
  and `K = 4`. The 256-bit value fits the reported metadata volume: about 36
  bytes per protected target, which is one 32-byte filter plus a small descriptor.
* **Hash functions.** H3 was one of the suggested families. Its matrix is this
  design's, generated from seeds.
* **Descriptor cache.** Its existence comes from the source's 3-cycle model. Its
  size and mapping, holding the whole filter in the entry, the memory layout and
  the refill protocol are all this design's.
* **Fault outcomes.** Clearing `valid` on a failing `brl`, the `FC_BAD_DESC`
  outcome and the fault-cause encoding are this design's.
* **Not built: the slower latency models.** The 5- and 10-cycle models
  (descriptor from the L1 D-cache, fully serialised) are not built as separate
  organisations. A descriptor-cache miss here plays the same role.
* **Not built: clear on trap.** Clearing BRState on every trap entry was an
  alternative, not the main design. Privileged software can still clear BRState
  through the CSR port.
* **No "skip" outcome.** The authors' instruction-set simulator also counted a
  third `brl` outcome, "skip", which is not defined. This unit has only pass and
  fault. A `brl` reached with `valid = 0` always faults, for example after a
  direct call to an address-taken function.
* **Not built: the rest of the system.** The core pipeline, the trap logic and
  the L1 D-cache are outside this RTL. They connect through the ports listed
  above.
* **Direct-mapped cache.** With many hot targets (the 181-target case above), a
  16-entry direct-mapped cache thrashes and `brl` costs about 40 cycles. More
  entries, or associativity, would be needed to keep such programs near 3 cycles.
