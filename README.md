# Ara-Opt: a multi-lane chaining RVV vector unit tuned for sustained throughput

A multi-lane vector processor reaches its peak rate only when three things
keep up at once: memory supplies a new beat every cycle, dependent
instructions start as soon as it is safe, and operands reach the functional
units without queueing behind register-file conflicts. When any of these
falls behind, the lanes sit idle even though compute and bandwidth are
available. This RTL is a four-lane RISC-V vector unit in the style of Ara
(VLEN = 1024 bit, DLEN = 256 bit, 128-bit AXI). It adds three groups of
mechanisms aimed at those three losses:

* **Memory front end.** Memory instructions become address-stream
  descriptors that are buffered, expanded by a small FSM into AXI bursts,
  queued and issued. A *next-VL prefetcher* fetches the following vector
  length's worth of data for unit-stride loads into a prefetch buffer, so
  the next strip of a strip-mined loop is served without waiting on memory.
* **Dependence and issue control.** The scoreboard frees an instruction's
  *read* registers as soon as every lane has fetched its source operands
  (*early read-dependence release*). Write registers stay booked until the
  instruction completes. Inside each lane, a new instruction may enter the
  operand requester in the same cycle the previous one issues its last
  request (*release-aware local issue*).
* **Operand delivery.** The operand requester watches the result channels
  of the load path, ALU and multiplier, and takes a chained operand straight
  from them (*forwarding*). It then does not re-read that operand from the
  VRF. The operand queues take a VRF read and a forwarded word in the same
  cycle (*dual-source queues*).

All four mechanisms have an enable parameter on the top (`EARLY_READ_RELEASE`,
`DYN_LOCAL_ISSUE`, `FORWARDING`, `PREFETCH`), so each can be measured against
the baseline behaviour.

## Configuration

| Parameter | Value | Where |
|---|---|---|
| Lanes | 4 | `ara_opt_pkg::NR_LANES` |
| VLEN / DLEN | 1024 / 256 bit | `VLEN`, `DLEN` |
| Element width | 32 bit only | `ELEN` |
| Bits per lane per element group | 64 (two elements) | `LANE_W` |
| VRF banks per lane | 8 | `NR_BANKS` |
| VRF words per lane | 128 × 64 bit (32 registers × 4 groups) | `VRF_WORDS` |
| LMUL | 1, 2, 4, 8 (VLMAX up to 256) | dispatcher |
| In-flight instructions | 8 | `NR_INSN` |
| Memory port | AXI, 128-bit data, 2-bit ID | `AXI_DW`, `AXI_IDW` |
| Burst length | ≤ 16 beats, never across 4 KiB | `MAX_BURST`, `PAGE_BYTES` |
| Prefetch | 3 slots × 64 beats, depth 1 × the current vector length | `vlsu_prefetch_buf`, `PF_DEPTH` |

## Organisation

```
 insn, rs1, rs2
      │
 ara_dispatcher ── decode, vl/vtype CSRs
      │ vinsn_t
 ara_sequencer ─── seq_instr_tracker (IDs), seq_scoreboard (read/write lists),
      │             seq_completion (read-done and done aggregation)
      ├──────────────┬──────────────┬──────────────┬──────────────┐
    lane 0         lane 1         lane 2         lane 3          vlsu
      │  load rows (256 bit, each lane takes its 64 bits)  ◄──────┤
      │  store words (64 bit per lane)                     ──────►│
                                                                  AXI
```

Each lane (`lane.sv`) holds:

```
 lane_sequencer ─► lane_opreq ──► lane_vrf (8 banks) ──► lane_opqueue ×5 ─► lane_alu / lane_mul / store port
                     │    ▲                                  ▲                      │
                     │    └── lane_fwd_match ◄── result channels (load, ALU, MUL) ───┤
                     └── written bits ◄── lane_result_wb (result queues, 2 write ports) ◄┘
```

The VLSU (`vlsu.sv`) chains
`vlsu_desc_gen → vlsu_desc_buf → vlsu_addrgen (+ vlsu_mmu) → read/write transaction FIFOs → vlsu_txn_issuer → AXI`.
On the return side, R beats with ID 0 go to `vlsu_vldu`. Other IDs go to
`vlsu_prefetch_buf`, and `vlsu_prefetch_ctrl` generates the prefetch
descriptors. Store data is packed into W beats by `vlsu_vstu`.

## Register-file layout and element groups

A vector register of 1024 bits is four *element groups* of 256 bits. Lane
`l` holds bits `[64l +: 64]` of every group, i.e. elements `2l` and `2l+1`.
The VRF word address in a lane is `vreg*4 + group`. The bank is
`address mod 8` and the row is `address / 8`. Under this layout an element
group is a single word in each lane, so every lane does the same work on the
same group in the same cycle. Ara itself shuffles bytes across lanes so that
it can mix element widths. This design has only 32-bit elements and uses the
plain layout above.

A register group (LMUL > 1) is `LMUL` consecutive registers, so an
instruction with vector length `vl` covers `ceil(vl/8)` consecutive word
addresses starting at `vd*4`.

## Dependences: what stalls, what chains

The sequencer keeps two masks over the 32 architectural registers for every
in-flight instruction:

* the **write list** (`vd` register group), cleared when the instruction
  completes in all lanes (or, for stores, when the last AXI write response
  returns);
* the **read list** (source register groups), cleared as soon as every lane
  reports *read-done* for the instruction. Read-done is sent one cycle after
  the operand requester has put the last source word into an operand queue.

An instruction stalls at issue only if its destination overlaps a write list
(WAW) or a read list (WAR). Read-after-write does **not** stall at issue:
the consumer is sent to the lanes right away and chains on the producer at
element-group granularity. Each lane keeps one *written* bit per VRF word
(`lane_result_wb`):

* When a load enters the lane, the bits of its whole destination range are
  cleared.
* When an arithmetic instruction consumes group `g` of its operands, its
  destination word `g` is cleared (the operand requester drives `clear_o`).
* When the VRF grants a write to a word, its bit is set again.

The operand requester reads a word only when its bit is set. Otherwise it
waits, unless forwarding supplies the word (below). With early read release,
a following write to a source register (typical: the next strip's load into
`v0` while `vmul` still runs on `v0`) can start as soon as `vmul` has
*fetched* `v0`, instead of waiting for `vmul` to finish.

Note: the written bit is cleared when an arithmetic instruction consumes
operand group `g`, not when it issues. Before that cycle, an older reader of
`vd` would see the previous value. WAR is still blocked at issue by the read
list, so this cannot happen.

## Lane issue and the operand requester

`lane_sequencer` keeps a 4-entry queue of instructions. It registers each
writing instruction's expected write count with the write-back block, sends
loads only to the write-back block, and feeds the rest to the single
operand requester. Without release-aware issue, the next instruction enters
only when the requester is idle. With `DYN_LOCAL_ISSUE = 1` it also enters
in the cycle the requester fires its last request, which removes one idle
cycle per instruction.

`lane_opreq` fetches two operands per group:

* operand A is `vs2`, or the store data register;
* operand B is `vs1`, or the scalar of a `.vx` form replicated to both
  elements.

It sends each operand to the queue of the target unit: ALU A/B, MUL A/B or
store data. A request needs a queue *credit*, which is the free entries
minus the VRF reads still in flight. The VRF returns data one cycle after the
grant.

## Forwarding and dual-source operand queues

When a needed word is not yet written, the requester presents its address
to `lane_fwd_match`. If the load, ALU or MUL result channel carries that
word in the same cycle, the data goes straight into the operand queue and
the VRF re-read is skipped. The producer still writes the word to the VRF
as usual.

An operand queue (`lane_opqueue`) can accept two words in one cycle:

* the VRF read data, which belongs to an earlier request and is always
  accepted;
* a forwarded word.

If only one entry is free, the forwarded word is refused (`fwd_accept_o = 0`).
The requester then simply retries, and later reads the word from the VRF.
Order inside a queue therefore always matches request order.

## VRF and write-back

`lane_vrf` has 8 single-ported banks. Per cycle:

1. two write ports are served first;
2. then two read ports, each only if its bank is still free.

A lost request is retried and counted as a conflict.

`lane_result_wb` holds three 4-deep result queues (load, ALU, MUL). It
offers up to two queue heads per cycle to the write ports, rotating the
priority so that no source starves. It counts granted writes per
instruction and reports completion when the expected number is reached.

## Memory front end

* **Descriptor generator.** It turns a memory instruction into a descriptor:
  ID, load/store, unit-stride or strided, base, stride, byte length, vl and
  register.
* **Descriptor buffer and arbiter.**
  - It keeps demand descriptors in program order.
  - A unit-stride load whose whole byte range lies in a valid prefetch
    window is a *prefetch hit*. It claims that window and goes straight to
    the VLDU.
  - Every other access goes to the address generator. Its command is pushed
    to the VLDU/VSTU in the same cycle.
  - Prefetch descriptors use the address generator only in cycles the
    demand path leaves it free.
  - A load (or prefetch) whose range overlaps a store still in flight waits.
  - A store whose range overlaps a load still in flight waits until the
    VLDU has taken all of that load's data. AXI does not order reads
    against writes, so a younger store must not overtake an older load.
  - A store invalidates any prefetch window it overlaps. For a strided
    store the whole span from its first to its last element counts.
* **Address generator** (FSM `IDLE → TRANS → EXPAND`, plus `FAULT`).
  - It asks the MMU for a translation of the current 4 KiB page and waits
    for it.
  - It then emits bursts: unit-stride accesses as ≤16-beat bursts that stop
    at page boundaries, strided accesses as one single-beat transaction per
    element.
  - A new translation is requested at each page crossing.
  - Accesses that the MMU rejects, and unit-stride accesses whose base is
    not 16-byte aligned, raise `exc_o` and touch no memory.
* **Transaction queues and issuer.** Separate read and write transaction
  FIFOs feed the AR and AW channels independently. Write responses are
  counted per store. When the last one returns, the store is done and its
  registers are released.
* **Next-VL prefetch.**
  - After a unit-stride demand load of `n` bytes at address `b` leaves the
    descriptor buffer, the prefetch controller requests `[b+n, b+2n)`
    (`PF_DEPTH` intervals) into a free slot of the prefetch buffer.
  - Prefetch reads use AXI ID `1 + slot`; demand reads use ID 0. The return
    path routes beats by ID.
  - A slot is served to a hit while it is still filling: the VLDU waits beat
    by beat.
* **VLDU / VSTU.**
  - The VLDU packs beats into 256-bit rows and hands each row to all four
    lanes together.
  - The VSTU collects one 64-bit word per lane per group and emits 128-bit
    W beats with byte strobes, so elements beyond `vl` are not written.

## Exceptions and illegal instructions

* An encoding outside the supported subset pulses `illegal_o` and is
  dropped. The subset is:
  - `vsetvli` with e32 and LMUL 1/2/4/8;
  - `vle32`/`vlse32` and `vse32`/`vsse32`;
  - `vadd`, `vsub`, `vand`, `vor`, `vxor` and `vmul` in `.vv` and `.vx`
    forms;
  - unmasked forms only.
* A faulting load pulses `exc_o` with its ID and writes zeros to its
  destination, so consumers do not deadlock.
* A faulting store pulses `exc_o`, consumes its operands and completes
  without bus traffic.

## Departures from the described design, and limitations

* Only 32-bit integer elements are supported. The FPU/MUL unit is an
  integer multiplier (low 32 bits of the product). There is no floating
  point and no multiply-accumulate.
* The slide unit, mask unit, lane result crossbar and further functional
  units are not present. Reductions, permutations and masking are not
  supported.
* Indexed loads and stores are not supported: they are decoded as illegal.
* The MMU is a fixed-latency identity translation with a range check
  (`MEM_TOP`).
* Elements past `vl` in the last element group of a register are
  overwritten (with load data or arithmetic results) rather than left
  undisturbed. Memory past `vl` is never written.
* Unit-stride accesses must start on a 16-byte boundary.
* Instructions are injected on a valid/ready port together with their
  scalar operands. There is no scalar core.

## Verification

Testbenches in `tb/` are self-checking. The smaller blocks (FIFO, operand
queue, forwarding match, ALU, multiplier, VRF, scoreboard, instruction
tracker, completion controller, dispatcher, descriptor generator, MMU) have
their own. The memory unit as a whole is tested by `tb_vlsu`. The remaining
lane and sequencer blocks are covered by the system tests. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog. `tb/axi_mem_model.sv`
is a behavioural AXI memory with configurable latency (20 cycles in the
system test) and optional random back-pressure. `tb/rvv_enc.svh` holds the
instruction encoders.

`tb_ara_opt` runs the full-size design with default parameters. Its
programs are:

* scal (`z = a·x`, N = 1024, LMUL = 8);
* axpy (`y = a·x + y`, N = 1024);
* a dependent chain of all ALU operations and `vmul` on strided and
  unit-stride data with a partial last group, stored unit-stride and
  strided;
* illegal encodings;
* faulting and misaligned accesses, followed by normal work.

All memory results are checked. The testbench also counts every mechanism
and fails if one never happens: WAW/WAR stall, early read release,
release-aware issue, forwarding, dual queue push, chaining wait, VRF bank
conflict, prefetch issue/hit/beats, translation, exception, illegal
instruction. A typical run reports scal N = 1024 in about 450 cycles. The
bus limit is 256 beats per direction, and the testbench requires fewer
than 768 cycles.

`tb_vlsu` drives the memory unit alone with 160 random loads and stores:
streaming unit-stride loads that trigger prefetch, random unit-stride and
strided loads and stores, and faulting addresses. The memory model adds
random back-pressure. Load rows are compared with a shadow copy of memory
in program order, and final memory contents and exception counts are
checked too.

`tb_ara_opt_workloads` runs the evaluation's kernel sizes that the
instruction subset can express: scal for N = 512, 1024 and 2048, and ger
(`A = A + x·yᵀ`) on a 128 × 128 integer matrix. A typical run gives:

| kernel | cycles | read-bandwidth bound |
|---|---|---|
| scal N = 512 | 261 | 128 |
| scal N = 1024 | 453 | 256 |
| scal N = 2048 | 837 | 512 |
| ger 128 × 128 | 8387 | 4096 |

It also runs an integer gemm on 32 × 32 matrices (`vmul.vx` and `vadd.vv`
into one accumulator register, because there is no multiply-accumulate).
That takes about 25 700 cycles. Each `vadd.vv` writes the accumulator that
the next one also writes, so it waits at the WAW check for its
predecessor to finish.

These are roughly half of the bound, well short of the 0.91–0.96 of the
roofline the paper reports for Ara-Opt. Where the remaining cycles go has
not been broken down.

To simulate with Verilator:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb rtl/ara_opt_pkg.sv rtl/*.sv tb/axi_mem_model.sv \
          tb/tb_ara_opt.sv --top-module tb_ara_opt -o sim
./obj_dir/sim
```

(`ara_opt_pkg.sv` must come first; Verilator ignores the second mention of it.
`-Wno-fatal` keeps lint warnings, mostly unused status bits, from stopping the build.) Other
testbenches are run the same way, each with its own top module.
