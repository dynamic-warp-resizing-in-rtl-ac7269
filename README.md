# Dynamic Warp Resizing: RTL of the issue and synchronisation path of a SIMT core

A SIMT core runs threads in lock-step groups, warps. The warp size is a trade-off.
Small warps suffer less from branch and memory divergence: fewer threads sit idle on the
other side of a branch, and threads that hit in the cache wait less for those that miss.
Large warps coalesce memory accesses better, because neighbouring threads usually touch the
same cache block, so one request can serve many of them.

Dynamic Warp Resizing (DWR), proposed by Lashgar, Baniasadi and Khonsari, gets both. Threads
run as *sub-warps* exactly as wide as the SIMD group (8 threads). Only the memory instructions
that profit from width are run in *large warps*. These are the loads and stores to
global/local/param space, called LATs ("large-warp-intensive" instructions). A large warp is
built on the fly from up to 8 partner sub-warps, 64 threads in the main configuration, called
DWR-64. The compiler puts a partner barrier, `bar.synch_partner`, in front of every LAT. When
all partners have reached it they are marked *combine-ready*, and the scheduler issues them
together. Barriers that keep catching partners at different PCs are not worth waiting for.
They are remembered in a small *Ignore List Table* and stop locking.

This repository gives synthesizable SystemVerilog for that mechanism inside one streaming
multiprocessor (SM): the sub-warp scheduler, the sub-warp combiner, fetch/decode, the
partner-synch table, the ignore list table, the barrier logic, and a 64-thread coalescer.
The parts of the SM that DWR does not change are outside the RTL: register file, SIMD lanes,
caches and memory system. The RTL talks to them through ports.

## 1. Main configuration

| quantity | value | in RTL |
|---|---|---|
| SIMD width = sub-warp size | 8 threads | `SIMD` |
| thread contexts per SM | 1024, i.e. 128 sub-warps | `NUM_SW` |
| largest warp (DWR-64) | 8 sub-warps = 64 threads | `GSIZE` |
| partner groups | 128 / 8 = 16, one PST entry each | derived |
| PST entry | valid + 32-bit PC + 8-bit lock vector | `pst` |
| ILT | 32 entries, 8-way, 4 sets picked by PC[1:0], 30-bit tag | `ILT_SETS`, `ILT_WAYS` |
| pipeline depth, and latency of `bar.synch_partner` | 24 cycles | `PIPE_DEPTH` |
| coalescing unit | 64-byte block, 64-thread width | `coalescer` |
| sub-warp status | 3 bits, plus a combine-ready bit | `dwr_pkg::sw_status_e` |

All of these numbers are the paper's. The one number of this design's own is `MAX_CTA = 8`,
the number of resident thread blocks known to the `__syncthreads()` logic.

DWR-16 and DWR-32 are `GSIZE = 2` and `GSIZE = 4`. The 16- and 32-wide SIMD variants are
`SIMD = 16`/`32` with `NUM_SW = 1024/SIMD`. The smaller ILTs the paper studies are
`ILT_SETS/ILT_WAYS = 4/4` (16 entries) and `2/4` (8 entries).

## 2. Structure

```
             +------------------- issue ---------------------+
  launch --->| subwarp_scheduler  (valid, PC, active, status, |
             |   combine-ready per sub-warp; round robin)     |
             |        |  picked sub-warp + its partner group  |
             |        v                                       |
             |       sco  (merge combine-ready partners)      |
             +--------|---------------------------------------+
                      v  warp = group, sub-warp mask, active masks, size, PC
                  frontend: fetch (once per warp) -> decode -> one sub-warp per cycle
                      v
                  execute delay line (PIPE_DEPTH - 2 stages)
                      v
                  writeback ----> synch_partner_unit (ILT + PST) --> release group
                      |                                               (combine-ready)
                      +-----> LAT: gather warp, coalescer ---> mem_req_*
                      +-----> status / PC update of the sub-warp in the scheduler
```

| file | role |
|---|---|
| `rtl/dwr_pkg.sv` | status encoding, instruction classes, event record |
| `rtl/subwarp_scheduler.sv` | sub-warp table, round-robin pick, status updates, `__syncthreads()` |
| `rtl/sco.sv` | sub-warp combiner |
| `rtl/frontend.sv` | fetch and decode, per-sub-warp hand-off, LAT hold |
| `rtl/synch_partner_unit.sv` | `bar.synch_partner`: ILT lookup, then PST |
| `rtl/pst.sv` | partner-synch table (step 1 and step 2) |
| `rtl/ilt.sv` | ignore list table |
| `rtl/coalescer.sv` | one request per distinct 64-byte block of a warp |
| `rtl/dwr_sm.sv` | top: wires the above, execute delay line, writeback, LAT gathering |

## 3. The LAT barrier

This is the part of the design that takes the most care.

**Partner groups are fixed.** Sub-warps `8g .. 8g+7` form group `g`. The combiner therefore
searches only within one group. One PST entry per group holds `valid`, the `PC` of the first
barrier reached, and a lock bit per partner.

**Executing `bar.synch_partner`** (in `synch_partner_unit`, at writeback of the instruction):

1. If the PC hits in the ILT, nothing happens. The sub-warp continues unlocked and will run
   its LAT alone.
2. Otherwise, step 1 of the paper is performed:
   * entry invalid: store the PC and set the sub-warp's lock bit;
   * entry valid, same PC: set the lock bit;
   * entry valid, different PC: set the lock bit and insert the *arriving sub-warp's* PC into
     the ILT.
3. Step 2 is then performed. If every partner is now accounted for, the group is released and
   the entry is cleared. All partners waiting at a LAT barrier go to READY with combine-ready
   set, and so does the arriving sub-warp. Otherwise the arriving sub-warp is locked
   (`ST_WAIT_SP`).

**Why it cannot deadlock.** Partners may diverge. One partner can end up at a different LAT
barrier, or at `__syncthreads()`, or it can exit. Then they would wait for each other forever
(the paper's Listing 2). DWR follows the rule of the baseline barrier: a LAT barrier does not
wait for partners *at this instruction*. It only holds a sub-warp until every partner has
reached *some* LAT barrier, a `__syncthreads()`, or program exit.

In the RTL, a partner at a different LAT barrier sets its own lock bit, and that counts.
Partners at `__syncthreads()`, exited partners and never-launched sub-warp slots reach the
PST as the `other_arrived` mask, and they count as present. When a partner reaches
`__syncthreads()` or exits, its group is checked again. That check can release the waiting
partners (the `rel_by_other` event). Partners released at different PCs are not merged. The
combiner only joins partners whose PC equals that of the sub-warp it picked, so the others
form their own, smaller warps.

**What the ILT buys.** When partners keep splitting across branches, waiting at the barrier
costs idle cycles and gains little coalescing. After the first such split, the barrier's PC
is in the ILT and is not waited on again. The ILT is filled only at run time, since divergence
cannot be known statically. It uses round-robin replacement per set. `ilt_flush` empties it,
for example between unrelated kernels. The test bench keeps it across two runs of the same
kernel to show the effect.

## 4. Issue, combining and timing

* Each cycle in which fetch can accept a warp, the scheduler picks the next READY sub-warp in
  round-robin order. If that sub-warp is not combine-ready, it is issued alone. If it is, the
  combiner adds every combine-ready, READY partner at the same PC and merges their 8-bit
  active masks into one 64-bit mask. The warp size, the number of sub-warps, travels with it.
* A sub-warp has at most one instruction in flight (`ST_INFLIGHT`).
* Fetch reads the instruction once per warp. Decode then sends the warp's sub-warps into the
  execute pipe one per cycle, lowest first. A large warp of k sub-warps uses the front-end for
  k cycles, as an 8-wide SIMD group would need.
* From issue to writeback an instruction takes `PIPE_DEPTH = 24` cycles: fetch 1, decode 1,
  and a 22-stage delay line. So `bar.synch_partner` acts 24 cycles after issue, the latency
  the paper assumes for it. A lone sub-warp is issued again 25 cycles after its previous
  issue.
* For a LAT, the writeback of each sub-warp collects its active mask. At the warp's last
  sub-warp the thread addresses are requested (`lat_addr_req`; the register file is outside),
  and the coalescer sends one request per distinct 64-byte block, lowest thread first, one
  per cycle on a valid/ready port. When the last request is accepted, the warp's sub-warps
  become READY. The memory unit takes one warp at a time. A LAT that reaches decode while an
  earlier LAT is in the pipe or being coalesced is held there (`lat_stall`).
* `__syncthreads()` is the baseline block barrier. A sub-warp waits (`ST_WAIT_SYNC`) until
  every launched, non-exited sub-warp of its thread block waits too. The block slot is given
  at launch.

## 5. Instruction format of the model

The paper works at the PTX level. The RTL needs a concrete encoding, so it uses a minimal one
of its own. PCs count instructions.

| `[31:28]` | class | notes |
|---|---|---|
| 0 | ALU | any non-LAT instruction |
| 1 | LAT | load/store to global/local/param space |
| 2 | `bar.synch_partner` | LAT barrier |
| 3 | `__syncthreads()` | |
| 4 | branch | `[27:20]` taken mask by sub-warp index in its group, `[19:0]` target |
| 5 | exit | |

The branch mask stands in for data-dependent divergence between sub-warps. Divergence inside a
sub-warp, handled by the baseline reconvergence stack, is not modelled.

## 6. Top-level ports (`dwr_sm`)

| port | dir | meaning |
|---|---|---|
| `launch_valid, launch_swid, launch_pc, launch_active, launch_cta` | in | load one sub-warp per cycle |
| `imem_addr` / `imem_rdata` | out/in | instruction fetch, answered in the same cycle |
| `lat_addr_req, lat_addr_group, lat_addr_pc` / `lat_addr[64]` | out/in | thread addresses of a LAT warp, same cycle |
| `mem_req_valid, mem_req_ready, mem_req_addr` | out/in/out | coalesced block requests |
| `ilt_flush` | in | empty the ILT |
| `all_exited` | out | every launched sub-warp has exited |
| `events` | out | one pulse per mechanism: combined/single issue, barrier wait, release, release by sync/exit, ILT hit, ILT insert, `__syncthreads()` release, LAT stall, memory request, idle cycle |

Reset is asynchronous and active low. It empties every table.

## 7. Where this RTL departs from, or adds to, the paper

* The paper gives the tables (PST, ILT, scheduler entry) and the barrier algorithm in detail.
  The scheduler policy, fetch/decode timing, memory-unit sequencing and instruction encoding
  are not given. Each of them was chosen here as the simplest form that does the job:
  round robin, one fetch per warp, one coalesced request per cycle, one LAT warp at a time.
* Partners at `__syncthreads()` or exit are counted through a mask rather than by setting
  lock bits. A PST entry is cleared when it releases.
* The combiner merges only partners at the same PC. The paper says that partners released at
  different PCs are "regrouped in different warps"; this is one concrete form of that.
* A LAT completes when its requests have been sent. There is no memory latency and no cache.
  Idle-cycle and performance figures of the paper therefore cannot be reproduced from this
  RTL, only the mechanism.
* The paper's evaluation replaces the barrier instruction by a 24-cycle stall. Here the
  barrier is a real instruction with the same 24-cycle latency.
* `MAX_CTA = 8` resident thread blocks is an assumed limit. The paper does not give one.
* The paper gives the L1 cache geometry two ways ("64-way, 12-set" and "64-set 12-way"). The
  cache is not part of this RTL, so the conflict does not matter here.

Coarse synthesis with yosys of `dwr_sm` at the default size gives about 16k word-level cells
and 11k flip-flop bits. Most of both is in the scheduler's 128-entry table and its
selection and barrier loops.

## 8. Simulation

Every block has a self-checking test bench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

```
verilator --binary --timing --assert -Irtl rtl/dwr_pkg.sv rtl/ilt.sv rtl/pst.sv \
  rtl/synch_partner_unit.sv rtl/sco.sv rtl/subwarp_scheduler.sv rtl/frontend.sv \
  rtl/coalescer.sv rtl/dwr_sm.sv tb/tb_dwr_sm.sv --top-module tb_dwr_sm -o sim
./obj_dir/sim
```

| test bench | what it checks |
|---|---|
| `tb_ilt` | hits, round-robin replacement, duplicate insert, set independence, flush |
| `tb_pst` | every case of steps 1 and 2, release by `__syncthreads()`/exit |
| `tb_synch_partner_unit` | 3000 random operations against a reference model |
| `tb_sco` | random combine-ready/PC/active patterns against a reference |
| `tb_subwarp_scheduler` | round robin, release -> one 64-thread warp, split release at two PCs, memory wake-up, `__syncthreads()`, exit |
| `tb_frontend` | record stream, rate (S sub-warps in S+2 cycles), LAT hold |
| `tb_coalescer` | request lists for strided, clustered and scattered addresses; one request per cycle |
| `tb_dwr_sm` | whole SM at default size, three runs (below) |

`tb_dwr_sm` runs at the default parameters. It first checks the 25-cycle re-issue spacing of a
lone sub-warp. Then it runs a kernel on all 1024 threads twice, modelled on the paper's
listings:

* a LAT barrier in front of each LAT;
* a branch that splits each partner group between two LAT barriers, which is a
  non-benefiting barrier that ends up in the ILT;
* a branch that leaves one partner at a LAT barrier while the rest wait at `__syncthreads()`.

In the first run, the first LAT must be issued fully combined: 4 requests per 64-thread group,
64 in all, where 8-thread warps would need 128. Every block touched by an executing thread
must be requested. Each mechanism listed under `events` must occur at least once. The second
run keeps the ILT, so ignored barriers appear. The test completes in well under a second.
