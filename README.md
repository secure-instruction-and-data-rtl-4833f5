# Combined instruction- and gate-level information flow tracking for a RISC-V core

A return address saved on the stack is an easy target. If a routine copies a string into a
five-byte local buffer without checking its length, the bytes past the buffer overwrite the saved
return address. The routine's `ret` then jumps wherever the attacker chose. Information flow tracking
(IFT) attacks this problem at the source. Every piece of data carries a label that says whether it
can be trusted, and hardware moves that label along with the data. A rule then refuses to use a
label-carrying value where only a trusted one is allowed.

This RTL builds IFT at two levels of detail and joins them in one unit:

* **Coarse-grained (instruction level).** Every architectural register and every data word the tag
  cache knows about carries a 1-bit tag. A small pipeline beside the core moves tags through each
  instruction. Two new instructions, `SDTCHECK` (store with tag) and `LDTCHECK` (load with tag check),
  let a routine protect its return address. If the protected word is overwritten by untrusted data
  before it is reloaded, the reload raises a security exception.
* **Fine-grained (gate level, "GLIFT").** For a few security-critical circuits, every gate gets a
  shadow gate. The shadow gate works out whether an untrusted input could change that gate's output.
  Two of these are provided:
  * a programmable netlist engine, which runs any combinational gate netlist (for example ISCAS/EPFL
    benchmark circuits or a circuit with a hidden trigger) with shadow logic;
  * a hard-wired AES T-table lookup with its own shadow logic.

The top module, `cf_ift_top`, holds the tag unit, the GLIFT engine with its policy checker, and the
T-table. It merges their exceptions into one `sec_exc` output. The processor core, its caches and
the on-chip bus are not part of this RTL. The tag unit watches the core through a trace port: one
instruction word and its effective data address per retired instruction.

## Where the design follows its source and where it chooses

The source design fixes these points, and the RTL follows them:

* tags are 1 bit wide;
* the tag unit has four parts: initialisation, propagation, check, and a tag cache kept apart from
  main memory;
* propagation runs through Fetch, Decode, Execute, Memory and Write Back;
* `LDTCHECK` is an I-type load encoding and `SDTCHECK` an S-type store encoding;
* a cache entry holds a *tag bit* and a *match bit*, with a counter of occupied entries;
* custom CSRs report the tag status and the mismatch;
* there is a shadow cell for each basic gate;
* a policy checker names the gate where untrusted information first appears;
* the shadow logic is applied to the AES T-table;
* registers are 64 bits wide.

Everything else is this design's own choice and is marked so in each file's opening comment. This
includes:

* funct3 codes, CSR numbers and bit layouts;
* the size and index of the tag cache;
* the OR rule for arithmetic results;
* tag forwarding;
* the tainted-jump rule;
* the engine's netlist format and sizes;
* the exception priority.

The largest departure concerns precision. The source's drawing of the AND shadow gate and its
stated aim ("no false conservative flows") describe *precise* GLIFT. Under it, an output is marked
untrusted only when the untrusted inputs can actually change it. One worked OR-gate example in the
source instead marks the output untrusted even when the trusted input already forces it to 1,
which is the *conservative* rule. All GLIFT blocks take a `PRECISE` parameter. The default is 1
(precise), and 0 gives the conservative rule.

## Tag encoding and instructions (`ift_pkg`, `tag_init`)

| Instruction | Opcode | funct3 | Effect on tags |
|---|---|---|---|
| `LDTCHECK rd, off(rs1)` | LOAD `0000011` | `111` | load; check the word's tag bit against its match bit |
| `SDTCHECK rs2, off(rs1)` | STORE `0100011` | `111` | store; mark the word protected, record match bit = tag bit = tag of `rs2` |
| other loads | LOAD | width | `rd` tag = cache tag of the word, OR'ed with the untrusted-window tag |
| other stores | STORE | width | cache tag of the word = tag of `rs2` |
| OP / OP-IMM (and the 32-bit forms) | | | `rd` tag = OR of the tags of the sources used |
| LUI, AUIPC, JAL, SYSTEM | | | `rd` tag = 0 (constant) |
| JALR | | | `rd` tag = 0; `rs1` tag checked by the jump rule |
| branches | | | no tag written |

funct3 `111` is unused for loads and stores in RV64, so both new instructions sit in holes of the
existing opcode space. The toolchain mask is `0x0000707F`.

Untrusted data enters through loads. `tag_init` tags a load when its effective address falls in a
window set by CSRs, `(addr & UNTR_MASK) == UNTR_BASE`. Examples are a receive buffer or
memory-mapped input. A tag then spreads from there through registers and stores.

## The tag pipeline (`tag_prop`)

A five-stage shadow of the core pipeline carries a small micro-operation per instruction.

| Stage | What happens to the tags |
|---|---|
| F | the instruction word and effective address are registered |
| D | `tag_init` decodes them into a micro-op holding the initial tag |
| E | source tags are read, forwarded from M and W when a previous instruction is still in flight; the ALU result tag is the OR of the sources used |
| M | the tag cache is looked up and written; the result tag of a load is taken from the cache; `tag_check` judges the instruction |
| W | the destination register's tag is written (never `x0`) |

Forwarding matters because dependent instructions follow each other every cycle. A tag loaded from
the cache in M is forwarded to an instruction in E in the same cycle. The `ev_bypass_m` and
`ev_bypass_w` outputs pulse each time a forwarded tag is used.

When `tag_check` raises an exception in M, the pipeline squashes:

* the instruction in M loses its register write;
* the younger instructions in F, D and E are dropped;
* the instruction arriving that cycle is dropped.

`exc_valid` rises one cycle later, **5 cycles after the offending instruction enters the tag
unit**. `exc_addr` is its data address. The tag unit cannot stop the core by itself. The core (or
an interrupt controller) is expected to take `exc_valid` as a trap.

## The tag cache (`tag_cache`)

The tag cache is a direct-mapped array of `ENTRIES` (default 64) entries, indexed by data address
bits `[3 +: log2 ENTRIES]`, one entry per 8-byte word. Each entry holds:

* `prot` — the word was written by `SDTCHECK`, so it holds a return address;
* the full address, for the hit test;
* `tagbit` — the current tag of the word;
* `matchbit` — the tag the word had when it was protected.

Only tainted words and protected words take entries. A miss reads as "trusted", so an ordinary
untainted store to an unprotected word frees its entry. Writes follow these rules:

| Event | Hit | Miss |
|---|---|---|
| store, tag 0 | unprotected entry freed; a protected entry keeps `tagbit = 0` | nothing |
| store, tag 1 | `tagbit = 1` | allocate; if the slot holds a protected entry, the tag is **dropped** (`drop` pulse) |
| `SDTCHECK` | entry becomes protected, `tagbit = matchbit = tag` | allocate; a protected entry in the slot is **evicted** (`evict` pulse) |
| `LDTCHECK` | if protected and `tagbit == matchbit`, the entry is released | nothing |

An ordinary store therefore never removes a protected return address. A tainted overflow over the
saved return address sets its `tagbit` to 1 while its `matchbit` stays 0. The following `LDTCHECK`
sees the mismatch. The lookup is combinational, and the write happens at the end of the M cycle.
`count` is the number of occupied entries, readable as a CSR.

## The check rules (`tag_check`)

* **Return-address rule.** `LDTCHECK` on a protected entry with `tagbit != matchbit` raises cause
  `EXC_RA_TAG`. `LDTCHECK` with no protected entry raises nothing. It is reported on `ev_unchecked`
  and in the status CSR, because a missing entry means the protection was evicted or never set.
* **Tainted-jump rule.** `JALR` whose `rs1` tag is 1 raises `EXC_TAINT_JMP`. This stops a jump to
  an address taken from untrusted input even when no `SDTCHECK` was used. It can be switched off.
  Conditional branches are not checked. Their targets are PC-relative, so no data tag can reach
  them, and ordinary copy loops branch on untrusted bytes all the time.
* With the tag unit disabled, nothing is raised.

## Control and status registers (`tag_csr`)

| CSR | Number | Contents |
|---|---|---|
| `TAGCTRL` | `0x8C0` | [0] tag unit enable, [1] tainted-jump rule enable, [2] untrusted window enable; reset `011` |
| `TAGSTAT` | `0x8C1` | [0] violation, [2:1] cause, [3] unchecked `LDTCHECK` seen, [4] drop seen, [5] evict seen, [15:8] violation count (saturating); any write clears it |
| `TAGADDR` | `0x8C2` | data address of the last violation |
| `UNTR_BASE` | `0x8C3` | untrusted window base |
| `UNTR_MASK` | `0x8C4` | untrusted window mask |
| `TAGCOUNT` | `0x8C5` | occupied tag cache entries (read-only) |

Reads are combinational. `csr_hit` tells the core that the number belongs to this unit.

## Gate-level tracking

### Shadow cells (`glift_cell`, `ift_pkg::glift_eval`)

For a two-input gate with values `a`, `b` and untrusted flags `at`, `bt`, the precise shadow outputs
are:

```
AND, NAND : t = a&bt | b&at | at&bt
OR,  NOR  : t = ~a&bt | ~b&at | at&bt
XOR, XNOR : t = at | bt
BUF, NOT  : t = at
```

A controlling trusted value (0 into AND, 1 into OR) blocks the untrusted input. With
`PRECISE = 0`, every gate uses `t = at | bt`.

### Netlist engine (`glift_engine`)

The engine holds a netlist in RAM, one 27-bit record `{gate, src0, src1}` per gate. Signal indices
0 to `MAX_IN-1` are the circuit inputs. Index `MAX_IN + k` is the output of gate `k`. Gates must be
in topological order, so each source index must be lower than the gate's own. An assertion checks
this.

Loading and running a netlist works like this:

1. Load the gate records through `prog_*` and the output map through `omap_*`.
2. Pulse `start` with `n_gates`, `n_out`, the input values and their untrusted flags.
3. The engine runs one gate per cycle through a `glift_cell`, then gathers one output per cycle.
4. `done` pulses **1 + n_gates + n_out cycles after `start`**.

While it runs, it streams `(index, type, value, taint)` for every gate.

| Parameter | Default | Why |
|---|---|---|
| `MAX_IN` | 256 | the largest input count among the benchmark circuits that fit (a 128+128-bit adder) |
| `MAX_GATES` | 3840 | fills a 12-bit signal index (256 + 3840 = 4096) |
| `MAX_OUT` | 160 | room for the 129 outputs of the adder benchmark, rounded up |

The largest memory-controller benchmark (1204 inputs, 8956 gates) does not fit. The circuits
tracked here are small security-critical pieces, not whole subsystems.

### Policy checker (`glift_policy_check`)

The checker watches the gate stream and records:

* the **first** gate whose output is untrusted, with its index and type;
* the number of untrusted gates.

This is the "fault detected at gate X" report. At `done` it compares the output taints with a
`protect` mask and pulses `exc` if a protected output depends on untrusted inputs. The hidden
trigger of a hardware Trojan is found this way. Mark the trigger input untrusted, and the first
untrusted gate is the NAND it feeds.

### AES T-table (`aes_ttable_glift`)

The T-table word is `T0[x] = {2·S(x), S(x), S(x), 3·S(x)}`. Here `S` is the AES S-box and `·` is
multiplication in GF(2^8) modulo `x^8+x^4+x^3+x+1`. The table is computed at elaboration by constant
functions: the inverse is taken as `x^254`, followed by the affine map with constant `0x63`. No data
file is needed.

The precise taint of each output bit is computed as follows. Take every index that agrees with the
input on its trusted bits. The output bit is tainted if those entries do not all agree on that bit
(the OR of the entries differs from their AND). A trusted index therefore gives a clean word, and a
fully untrusted index taints every bit that varies over the table. The result is registered: output
one cycle after `in_valid`. In `cf_ift_top`, an access with `tt_check` set whose result carries any
taint raises `exc_tt`. This models a cache-timing or table-tampering path that lets attacker-chosen
index bits steer the lookup.

## The top (`cf_ift_top`)

| Output | Meaning |
|---|---|
| `exc_tag` / `exc_tag_cause` / `exc_tag_addr` | tag unit exception |
| `exc_glift` | a protected engine output is untrusted |
| `exc_tt` | a checked T-table lookup is untrusted |
| `sec_exc`, `sec_cause` | OR of the three; cause priority tag > GLIFT > T-table |

The engine's `start` is accepted only while it is idle. All the `ev_*` event pulses are brought out
for performance counters. At the defaults, synthesis gives roughly 10k flip-flop bits. About
118 kbit are memory, almost all of it the netlist RAM (3840 × 27 bits).

## Simulating

All files are plain SystemVerilog and need no data files. With Verilator 5:

```
verilator --binary --timing -Irtl -Itb rtl/ift_pkg.sv rtl/*.sv tb/tb_cf_ift_top.sv --top-module tb_cf_ift_top
./obj_dir/Vtb_cf_ift_top
```

Put `ift_pkg.sv` first. Each testbench prints `TB_RESULT checks=N failures=M` and stops itself.

| Testbench | What it checks against |
|---|---|
| `tb_glift_cell` | every input combination, against a brute-force "can flipping the untrusted inputs change the output" reference, in both precision modes |
| `tb_tag_init` | hand-assembled instruction words |
| `tb_tag_check` | all input combinations |
| `tb_tag_cache` | thousands of random operations against a reference model (8 entries, to force conflicts), plus the return-address scenario |
| `tb_tag_csr` | CSR reads, writes and status recording |
| `tb_tag_prop` | the pipeline alone: both forwarding paths, the 5-cycle exception latency, squashing |
| `tb_tag_module` | instruction traces of a routine that protects `ra`, copies into a buffer and returns: benign, overflowing, with the unit disabled, and a tainted jump |
| `tb_glift_engine` | the four-gate Trojan circuit under all 32 input patterns, and random 300-gate netlists against a software model; checks the cycle count |
| `tb_glift_adder` | a 128+128-bit ripple-carry adder (256 inputs, 129 outputs) run through the engine and policy checker at full size: sums against real addition, every gate's taint against a brute-force reference, the first untrusted gate, the exception and the cycle count |
| `tb_glift_policy_check` | random gate streams against a reference |
| `tb_aes_ttable_glift` | known T0 words, the S-box by inverse search, and a brute-force shadow reference |
| `tb_cf_ift_top` | full defaults. It runs the overflow attack, the tainted jump, eviction, drop and unchecked cases, a GLIFT run with and without the protect mask, and a tainted T-table lookup. It counts every mechanism (M and W forwarding, squash, each exception cause, evict, drop, unchecked) and fails if one never happened |

## Known limits

* The core, L1/L2 caches, PMP, interrupt controller, debug and power blocks and the TileLink bus
  are not included. The tag unit attaches through a plain trace port, not a bus.
* The tag unit follows the core's retired-instruction order. It does not model speculative
  execution or multiple cores.
* Tags are tracked per 8-byte word, not per byte. A tainted byte store taints its whole word.
* The GLIFT engine handles combinational netlists. A sequential circuit must have its flip-flops
  cut into extra inputs and outputs and be stepped once per clock by the host.
* The tag cache can lose information. A tainted store that collides with a protected entry is
  dropped, and an `SDTCHECK` that collides with another protected entry evicts it. Both events are
  counted and visible in `TAGSTAT`, so software can tell when protection was incomplete.
