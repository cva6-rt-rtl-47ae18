# Real-time extensions for an RV64 application core (CVA6-RT)

An application-class RISC-V core such as CVA6 runs Linux well, but it is a
poor host for control tasks with deadlines: a TLB or cache line belonging to
a critical task can be evicted by any other task, and an interrupt has to
cross the decode stage, a trap into machine mode and a long software
register-save sequence before the handler does useful work. CVA6-RT keeps the
CVA6 pipeline and adds three hardware mechanisms that bound those latencies:

1. **TLB partitioning and locking.** TLB entries are grouped into partitions;
   privileged software chooses, per task, a bitmap of the partitions the task
   may refill. Some entries can also be pinned so that they are never evicted.
2. **Cache ways as scratchpad.** Any number of L1 instruction- and data-cache
   ways can be turned into a scratchpad memory (SPM) that sits at a fixed
   physical address and always answers in one cycle.
3. **Fast interrupts.** A CLIC (RISC-V Core-Local Interrupt Controller) with a
   virtualisation bit, interrupt detection moved to the commit stage with
   direct injection into M, HS or VS mode, and hardware register stacking.

This repository gives synthesizable SystemVerilog for those three mechanisms
and wires them together in one top module, `cva6rt_top`. The CVA6 pipeline
they plug into (frontend, decode, issue, execute, commit, CSR file, page-table
walker) is the unchanged open-source CVA6 and is not included: every place
where it would connect is a port of `cva6rt_top`.

```
                   fetch (virtual)                 LSU (virtual)
                        |                               |
                      I-TLB  (tlb)                    D-TLB  (tlb)       <- PTW fills, partition bitmap,
                        |                               |                   lock count, pinning writes
  SoC -> I-SPM port --> +       ctx_save, SoC D-SPM --> +   (in that order)
                        |                               |
               spm_decoder + l1_cache_spm     spm_decoder + l1_cache_spm
               I-cache ways | I-SPM ways      D-cache ways | D-SPM ways
                        |                               |
                    instruction memory port         data memory port

  interrupt lines -> clic -> clic_ctrl -> take / trap to commit -> ctx_save
```

## The interrupt path and its cycle budget

This is the part with the tightest timing, and the reason for most of the
design choices below. The reference figure for CVA6-RT is a 12-cycle average
interrupt latency (12 to 13 cycles), split as:

| contribution      | cycles | where in this RTL                                  |
|-------------------|--------|----------------------------------------------------|
| irq propagation   | 3      | `clic`: pending, arbitration, output registers      |
| irq injection     | 2 (3)  | `clic_ctrl`: sample and decide registers; +1 when commit cannot take it |
| pipeline flush    | 7      | CVA6 commit/frontend, outside this RTL              |
| context save      | 0      | `ctx_save` runs in the background                   |

**`clic`.** A source change is registered into the pending bit (stage 1;
level-triggered bits follow the line, edge-triggered bits are set on an edge
and held until acknowledged). Stage 2 is a full comparison of all pending and
enabled interrupts by the key {privilege mode, `clicintctl`, id}, registered.
Stage 3 is the output register to the core. A source that rises between two
clock edges therefore appears on `irq_o` after the third rising edge. The
level handed to the core is the upper `nlbits` bits of `clicintctl` with the
lower bits forced to one, as in the CLIC draft. An acknowledge clears an
edge-triggered pending bit and invalidates any copy of that id still in
stages 2 and 3, so the same event is never taken twice.

**`clic_ctrl`.** The core side re-registers the CLIC output next to commit
(stage 1) and then decides (stage 2) whether it may be taken:

* target mode: M, HS (S-mode interrupt) or VS (S-mode interrupt with the
  CLIC's virtual bit set); ranks M > HS > VS > U;
* taken if the target ranks above the current mode, or equals it and that
  mode's global interrupt enable (`mie`/`sie`/`vsie`) is set;
* and only if its level exceeds both the target mode's threshold
  (`xintthresh`) and its current interrupt level (`xil`): this is what gives
  preemption and nesting.

Because the injection goes directly to the target mode, a guest's interrupt
does not first trap into M or HS mode. The trap request carries the vector:
`xtvt + 8*id` for selectively hardware-vectored interrupts, `xtvec`
otherwise. `take_o` rises in the first cycle in which the trap request is
valid, `commit_ready_i` is high and no context save is running; the same
signal acknowledges the CLIC and starts `ctx_save`. With commit ready, a
source edge reaches `take_o` after exactly 3 + 2 = 5 rising edges; the
end-to-end testbench checks that number.

*Tail-chaining.* When the core signals an interrupt return (`xret_i`, in the
cycle the xRET commits, with `xil` already restored to the level being
returned to), the controller evaluates the request it is sampling in that
same cycle combinationally instead of waiting for its decide register. If
that interrupt is now eligible it is taken in the return cycle itself, with
`tail_chain_o` high. The context already on the save area still belongs to
the interrupted code, so the top does not start `ctx_save` for a chained
take; the new handler simply reuses the saved context. The rest of the time
the decision stays registered, as above.

**`ctx_save`.** On `take_o` the unit latches a 32-bit register mask and a
base address (both from CSRs) and stores each selected register `xi` (never
`x0`) at `base + 8*i`, in ascending order, through the data-side cache port,
where it takes priority over the LSU. With the save area inside the D-SPM each
store costs two cycles of that port (grant, then SPM write), so saving all 31
registers occupies the port for 62 cycles. This is not on the latency path:
the handler is fetched from the I-SPM while the save runs. `pending_o` lists
the registers not yet stored so that the issue stage can hold any write to
them; LSU requests wait until the save is done.

What the core around it must do: raise `mil`/`sil`/`vsil` to the level of the
interrupt it takes (as the CLIC CSRs specify), restore them on return, and
flush the pipeline. Register restore on return is not part of this RTL.
Every save goes to the same base address, so for nested interrupts the
software (or the CSR file) must move the base per nesting level before
enabling preemption.

## Cache ways as scratchpad (`l1_cache_spm`, `spm_decoder`)

`spm_ways_i = n` turns ways `0 .. n-1` into scratchpad. They form one window
at `SPM_BASE` of `n * WAY_BYTES` bytes: window offset `k*WAY_BYTES + o` is
way `k`, set `o / LINE_BYTES`, byte `o % LINE_BYTES` of the same data SRAM a
cache hit would read. `spm_decoder` makes that decision combinationally on
the request address; an SPM access never checks tags, never misses and
answers one cycle after its grant, reads and writes alike, with no memory
traffic.

Two rules keep SPM data and cache data apart:

* **Replacement exclusion.** The refill victim is chosen only among ways
  `n .. WAYS-1` (lowest invalid way first, otherwise the first such way at or
  after an 8-bit LFSR). If every way is SPM, misses are served from memory
  without allocation.
* **Tag/valid clearing.** Whenever `spm_ways_i` changes, a sweep walks all
  sets (one per cycle, 256 cycles at the default sizes) and clears tag and
  valid bits of every way that is SPM before or after the change, so a line
  left in a way that became SPM can never hit against data the software
  writes there. The cache grants nothing while `busy_o` is high. The same
  sweep (over all ways) implements `flush_i` and initialises the tags after
  reset.

The cache part is deliberately simple: blocking, write-through,
no-write-allocate, one 128-bit line refill per miss, 64-bit stores forwarded
to memory and acknowledged on the memory grant. A request is accepted only
when the controller is idle, so back-to-back accesses issue every other cycle.

The same module serves both sides. On the instruction side the SPM must also
be writable, to load handler code: `cva6rt_top` has a SoC port (`ispm_*`)
that shares the I-cache port with fetch and wins over it. The D-SPM has
a matching SoC port (`dspm_*`, physical addresses) for other masters, such
as a DMA engine filling a task's data. On the data-cache port the context
save has the highest priority, then that SoC port, then the LSU.

## TLB partitions and pinned entries (`tlb`, `tlb_plru_part`)

Both TLBs are fully associative, 16 entries, Sv39 (4 KiB, 2 MiB and 1 GiB
pages, ASID and global bit), with a combinational lookup as in CVA6.

Replacement is the CVA6 tree pseudo-LRU, with a constraint. The tree has 15
bits; touching an entry (hit or refill) makes each node on its path point to
the other half. To pick a victim the tree is walked from the root, following
each node's bit unless the half it points to contains no *allowed* entry, in
which case the other half is taken. Allowed entries are those whose partition
is enabled in `part_en_i` and that are not locked; an allowed invalid entry is
used first. With four partitions of four aligned entries each partition is a
subtree, so two tasks with disjoint bitmaps can never evict each other's
translations.

Entries `0 .. lock_cnt_i-1` are locked: never chosen as victims and not
cleared by `flush_i`. Software places a translation in any slot directly with
the `cfg_we_i/cfg_idx_i/cfg_entry_i` write and then raises `lock_cnt_i` to
pin it. A refill arriving when no entry is allowed is dropped and reported on
`upd_drop_o` (the walker then simply retries or faults).

## Top-level interface (`cva6rt_top`)

Ports are grouped by the CVA6 unit on the other side: translation control and
walker fills; cache/SPM configuration; the fetch port (virtual address,
translated when `ixlat_en_i`; a TLB miss is reported on `itlb_miss_o` instead
of reaching the cache); the I-SPM SoC port; the LSU port and the D-SPM SoC port (likewise with
`dxlat_en_i`/`dtlb_miss_o`); one instruction and one data memory port
(request/grant, read data returned as a whole line with `rvalid`); the CLIC's
interrupt lines and 32-bit register bus; the hart state the CLIC controller
needs (privilege, virtualisation, enables, thresholds, levels, `xtvt`,
`xtvec`); the commit trap interface (`commit_ready_i`, `xret_i`, `trap_o`,
`take_o`, `tail_chain_o`);
and the register-file read port and status of the context save. Shared types
(`tlb_entry_t`, `clic_irq_t`, `irq_trap_t`, `priv_lvl_t`) are in
`rtl/cva6rt_pkg.sv`.

CLIC register map (byte addresses on the CLIC bus): `0x0000` `cliccfg`
(`nlbits` in bits 4:1, reset 8); `0x1000 + 4*i` interrupt `i`, byte 0
`clicintip`, byte 1 `clicintie`, byte 2 `clicintattr` (`[7:6]` mode, `[5]`
virtual, `[2]` active-low, `[1]` edge-triggered, `[0]` vectored), byte 3
`clicintctl`.

## Parameters

| parameter (module)                 | default        | origin |
|------------------------------------|----------------|--------|
| `ENTRIES` (`tlb`), `ITLB/DTLB_ENTRIES` | 16         | CVA6 default TLB size |
| `NUM_PART` / `TLB_PARTS`           | 4              | own choice |
| `ICACHE_BYTES`, `ICACHE_WAYS`      | 16 KiB, 4      | CVA6 default I-cache |
| `DCACHE_BYTES`, `DCACHE_WAYS`      | 32 KiB, 8      | CVA6 default D-cache |
| `LINE_BITS`                        | 128            | CVA6 default |
| `ISPM_BASE`, `DSPM_BASE`           | 0x1000_0000, 0x1010_0000 | own choice |
| `NUM_INTR` (`clic`)                | 256            | own choice (CLIC maximum with 8-bit ids) |
| CLIC propagation / injection       | 3 / 2 cycles   | CVA6-RT latency breakdown |
| `NREGS` (`ctx_save`)               | 32             | RV64 integer registers |

## How far this follows CVA6-RT, and what is this design's own

Taken from the published description: way-granular SPM mode in both L1
caches, contiguous SPM ways mapped by address decoding, SPM ways out of
replacement with tags and valid bits cleared; PLRU TLB replacement constrained
to partitions chosen by a bitmap, plus a configurable number of locked
entries; a CLIC with virtualisation support feeding interrupt detection at
commit with direct injection to lower privilege modes, including a virtual
guest; hardware saving of a configurable register subset to a fixed memory
area; and the cycle counts of the latency breakdown.

Chosen here, because the description does not fix them: the partition shape
(equal aligned groups) and the PLRU walk rule; locked entries as the lowest
indices, pinned through a direct write port and kept across flushes; the SPM
window base addresses, the choice of ways `0..n-1`, the sweep and the whole
cache policy (write-through, blocking, LFSR victim); the encoding of the
CLIC's virtual bit and the fixed mode field (no `nmbits`); the split of the
three CLIC stages and two injection stages; tail-chaining as a combinational
decision in the xRET cycle, without a new save; the rank rule for M/HS/VS; holding
a new trap while a context save runs; the save layout `base + 8*i` and the
pending-register interlock; and all port names and handshakes.

Not included: the CVA6 pipeline and walker, register restore on interrupt
return, `mnxti`-style CSR accesses (which live in the CSR file), and the
7-cycle flush, so the full 12-cycle figure cannot be measured on this RTL
alone. The propagation and injection part can: over 200 random interrupts it
measures 5 cycles, or 6 when commit stalls for one cycle, which with the
7-cycle flush gives the 12 to 13 cycles of the reference figure.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With
Verilator 5, for example the end-to-end test at default sizes:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/cva6rt_pkg.sv tb/tb_cva6rt_top.sv --top-module tb_cva6rt_top
./obj_dir/Vtb_cva6rt_top
```

| testbench            | what it checks |
|----------------------|----------------|
| `tb_tlb_plru_part`   | victims against a tree model for random allowed masks; victim always allowed; sequential LRU order; partition isolation |
| `tb_tlb`             | 4K/2M/1G translation, ASID/global; partition isolation; locked entry surviving fills and flush; dropped fills |
| `tb_spm_decoder`     | window bounds for every way count; way/set/offset of random addresses |
| `tb_l1_cache_spm`    | reset sweep length; miss/hit data and 1-cycle hits; write-through; 1-cycle SPM with no memory traffic; SPM data surviving a thrash of its set; no stale hit in new SPM ways; all-SPM bypass; flush |
| `tb_clic`            | register read-back; 3-cycle propagation; arbitration order; disabled, edge, negative-polarity, software-set and virtual interrupts; level from `nlbits` |
| `tb_clic_ctrl`       | 2-cycle and 3-cycle injection; thresholds and preemption; M/HS/VS rank rule; vector addresses; hold during context save; tail-chain on return |
| `tb_ctx_save`        | stored registers, addresses, order and count for random masks; one register per cycle; pending mask |
| `tb_cva6rt_top`      | the whole path at default sizes (see its header); counts every mechanism |
| `tb_irq_latency`     | the latency case study on the whole top: 200 random interrupts (levels, vectoring, save masks, commit stalls); ids, vectors, save masks and latency 5..6 cycles, printing min/avg/max (measured 5 / 5.51 / 6) |

The simulator used is two-state; all state that is read is reset, except the
cache SRAMs, whose tags are cleared by the reset sweep before use.
