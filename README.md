# REALM: per-manager traffic regulation and monitoring for AXI4 crossbars

In a system on chip where a real-time CPU core shares its memory with DMA engines and accelerators, the core's memory latency depends on what everyone else is doing. A DMA engine issuing 256-beat bursts holds the memory path for hundreds of cycles at a time. A round-robin crossbar is fair per transaction, not per byte, so a core waiting behind such a burst can see its access latency grow from a handful of cycles to several hundred.

REALM puts one small unit in front of each manager port of the crossbar. The unit:

* **cuts long bursts into short fragments**, so that arbitration again happens every few beats;
* **buffers write data** until a whole fragment is present, so that a slow manager cannot hold the write channel of a subordinate;
* **counts the bytes** each manager moves into each address region, and **enforces a byte budget per period**. It can also throttle a manager as its budget runs low;
* **measures** bytes, elapsed time and average access latency, for software to read;
* **isolates** a manager: it stops new transactions and lets outstanding ones finish. This happens on command, when a budget runs out, and while parameters that must not change under traffic are updated.

All units are configured through one register file. A bus guard gives exclusive access to that register file to the single manager that claimed it.

The RTL is SystemVerilog (IEEE 1800-2017) and is fully synthesizable. It was compiled with Verilator 5 and with the slang front end of Yosys.

## Structure

```
realm_sys                       top: NumMgr units + configuration
 ├─ realm_bus_guard             ownership of the configuration space
 ├─ realm_cfg_regs              registers of all units
 └─ realm_unit  (x NumMgr)      one per manager
     ├─ realm_isolate           ingress isolation, outstanding-transaction cap
     ├─ realm_burst_splitter    fragmentation, B coalescing, R last gating
     ├─ realm_mr_unit           regions, budgets, periods, throttling, statistics
     ├─ realm_write_buffer      store-and-forward for write bursts
     └─ realm_fifo              2-entry AR cut (generic FIFO, also used inside the others)
realm_pkg                       AXI4 channel structs, register bus structs, config/stat structs
```

`realm_sys` does not contain the crossbar. Its `xbar_req_o` and `xbar_rsp_i` arrays connect to the subordinate ports of whatever AXI4 crossbar the system uses; `mgr_req_i` and `mgr_rsp_o` connect to the managers. Address and data are both 64 bits wide. The ID width is 4 bits and the user width is 1 bit. These are constants in `realm_pkg`.

Default parameters of the top: 3 managers, 2 address regions per unit, 8 outstanding transactions per direction, and a 16-beat write buffer.

## The request path through a unit

Requests flow from the manager to the crossbar in this order:

1. **Isolation** (`realm_isolate`)
   - It counts outstanding writes (from AW accepted to B) and reads (from AR accepted to the last R).
   - While `isolate_i` is high, it refuses new AW and AR requests.
   - A request that has already been presented downstream is never withdrawn. The AXI rule that a valid may not drop before ready is kept even when isolation arrives mid-handshake.
   - `isolated_o` rises once nothing is outstanding and no request is half-presented.
   - W beats pass only for write addresses that were accepted or are being presented. An isolated manager therefore cannot push data without an address.
   - The same counters cap outstanding transactions at `NumPending` per direction.
2. **Burst splitter** (`realm_burst_splitter`): see below.
3. **Monitoring and regulation** (`realm_mr_unit`): see below.
4. **Write buffer** (`realm_write_buffer`)
   - It holds up to 2 AWs and `BufferDepth` W beats.
   - An AW and its data are released only once the last beat of that burst is inside the buffer. After that, the burst flows to the crossbar without gaps.
   - AR, R and B pass straight through.
5. **Request cut**: a 2-entry FIFO on AR. The write buffer already delays AW.

Latency: a read address leaves the unit one cycle after the manager presents it. A write address leaves one cycle after the last beat of its fragment has entered the buffer. Responses pass through combinationally.

`EnableSplitter` and `EnableWriteBuffer` (both 1 by default) remove those stages at elaboration, for managers that never issue bursts. Without a write buffer, an AW cut FIFO keeps the one-cycle delay.

## Fragmenting bursts

The splitter holds the manager's AW or AR and emits fragments of `frag_len` beats; the last fragment carries whatever is left.

- **Addresses**: for INCR bursts, each fragment's address advances by `beats << size`. FIXED bursts keep their address.
- **Handshake**: the upstream request is acknowledged together with the last fragment, so splitting adds no cycle.
- **Bursts never split**:
  - WRAP bursts;
  - exclusive accesses (`lock`);
  - atomic operations (`atop != 0`);
  - non-modifiable transactions (`cache[1] == 0`) of 16 beats or fewer. AXI4 forbids changing these.

Three small FIFOs, each `NumPending` deep, hold one entry per emitted fragment:

| FIFO | content | used to |
|---|---|---|
| W length | beats in the fragment | regenerate `w.last` at each fragment boundary |
| B meta | "last fragment of its burst" | merge B responses: the fragments' B's are absorbed and one B with the worst response code (largest `resp` value) is returned |
| R meta | "last fragment of its burst" | pass R beats unchanged but mask `r.last` except on the final fragment |

This relies on responses returning in order, which holds when the crossbar and subordinates keep AXI ordering for the single ID a manager uses. `frag_len` is 1..256. A value of 0 is treated as 1. When a write buffer is present, write fragments are further limited to `BufferDepth` beats (16 by default), so that every fragment fits in the buffer. Reads can use the full range.

## Budgets, periods and throttling

Each unit has `NumRegions` address regions. For each region, the configuration gives:

- the bounds `[start, end)`. A region with `end <= start` is disabled.
- a write budget and a read budget, in bytes;
- a write period and a read period, in cycles. A period of 0 means "never replenish".

At every fragment's AW/AR handshake, the M&R unit:

1. finds the region the address falls into. Addresses outside all regions are not regulated.
2. subtracts the fragment's size `(len + 1) << size` from that region's budget for that direction. The budget saturates at 0.
3. adds the same amount to the byte counter.

Each period counter runs on its own. At the end of its period, the budget left is reloaded, and the byte and time counters restart.

**Depletion.** With regulation enabled (`CTRL[2]`), the unit is depleted as soon as any enabled region has no budget left in either direction. A depleted unit:

- isolates the manager at ingress;
- holds any fragment already past the splitter.

This stops traffic within a fragment of the budget: a period can overrun its budget by at most one fragment. The manager resumes when the period rolls over.

**Throttling.** With throttling enabled (`CTRL[1]`), the outstanding limit is reduced as the budget shrinks, before it runs out. Writes and reads are throttled separately: the write limit follows the smallest fraction of write budget left over the enabled regions, and the read limit likewise.

| budget left | outstanding fragments allowed |
|---|---|
| ≥ 1/2 | `NumPending` (8) |
| < 1/2 | `NumPending/2` (4) |
| < 1/4 | `NumPending/4` (2) |
| < 1/8 | `NumPending/8`, at least 1 |

**Latency.** Each direction has a timestamp FIFO, `NumPending` deep. It records the cycle of each AW/AR handshake. When the matching B or last R arrives, the elapsed cycles are added to a sum and a count is incremented. Software divides the two to get the average latency per fragment.

All counters are 32 bits wide (`CntWidth`).

## Reconfiguring safely: the unit FSM

Some parameters would corrupt bursts in flight if they changed under traffic: the fragment length and the region bounds. Writing any of these registers pulses `cfg_update` to the unit. The unit's FSM then steps through three states:

| state | code | what happens | leaves when |
|---|---|---|---|
| RUN | 0 | normal operation with the active copies | a `cfg_update` arrives (it is remembered if one arrives mid-sequence) |
| DRAIN | 1 | manager isolated; outstanding transactions complete | isolation is complete |
| APPLY | 2 | new fragment length and bounds copied into the active registers; all periods restarted | after one cycle, back to RUN |

Budgets and periods are used as written. Writing them restarts the periods (`reload`), so a new budget applies at once.

The manager is isolated in any of these cases:

- user command (`CTRL[0]`);
- depletion;
- DRAIN or APPLY.

## Register map

The register bus carries one access per cycle: `valid`, `write`, a 16-bit byte address, 32-bit data, and the requester's ID. It is answered in the same cycle with `rdata` and `error`. An error is returned for:

- unmapped or misaligned addresses;
- writes to read-only registers;
- any access the bus guard refuses.

| address | name | access | content |
|---|---|---|---|
| 0x0000 | GUARD | rw | `[31]` claimed, `[3:0]` owner ID |
| U + 0x00 | CTRL | rw | `[0]` isolate, `[1]` throttle enable, `[2]` regulation enable |
| U + 0x04 | STATUS | ro | `[0]` isolated, `[1]` depleted, `[2]` throttling, `[5:4]` FSM state |
| U + 0x08 | FRAG_LEN | rw | fragment length in beats, 1..256, reset 256. Writes are clamped to that range. Intrusive. |
| U + 0x10 / 0x14 | W_LAT_SUM / W_LAT_CNT | ro | write latency sum / count |
| U + 0x18 / 0x1C | R_LAT_SUM / R_LAT_CNT | ro | read latency sum / count |
| R + 0x00 / 0x04 | START lo / hi | rw | region start address. Intrusive. |
| R + 0x08 / 0x0C | END lo / hi | rw | region end address (exclusive). Intrusive. |
| R + 0x10 / 0x14 | W_BUDGET / W_PERIOD | rw | bytes / cycles. Writing restarts the periods. |
| R + 0x18 / 0x1C | R_BUDGET / R_PERIOD | rw | bytes / cycles. Writing restarts the periods. |
| R + 0x20 / 0x24 | W_ / R_BUDGET_LEFT | ro | budget left in the current period |
| R + 0x28 / 0x2C | W_ / R_BYTES | ro | bytes moved in the current period |
| R + 0x30 / 0x34 | W_ / R_TIME | ro | cycles elapsed in the current period |

Base addresses:

- unit `u` (0-based): `U = 0x400 * (u + 1)`;
- region `r` of that unit: `R = U + 0x40 * (r + 1)`.

All registers reset to 0, except FRAG_LEN.

## The bus guard

After reset the configuration space is unclaimed, and every access except one to GUARD returns an error.

- **Claim**: the first write to GUARD claims the space for the requester's ID.
- **Handover**: from then on only the owner gets through. The owner hands over ownership by writing the new owner's ID into `GUARD[3:0]`.
- **Errors**: writes to GUARD by anyone else return an error, as do all other accesses by non-owners.
- **Reads**: GUARD can always be read.

In a system, a boot-time trusted manager would claim the space first and hand it over to the managing software.

## Departures and own choices

These points are interpretations or additions, not fixed by the original description:

* Separate write and read budgets and periods per region. A depleted write budget also stops reads, because isolation covers both directions.
* The throttle rule (halving the outstanding limit at 1/2, 1/4 and 1/8 of the budget left) is one simple choice for "reduce outstanding transactions as the budget shrinks".
* The latency definition (handshake to B / last R, per fragment).
* The register map and the guard data format.
* The register bus protocol.
* Reset values.
* Which parameters count as intrusive.
* Holding fragments in the M&R unit while depleted. Without this, a burst already inside the splitter could run far past its budget.
* Responses are assumed in order per manager. Multiple IDs with reordering across subordinates are not tracked.
* Atomic operations that return read data pass unsplit, but their R beats are not tracked by the splitter's R meta FIFO.
* The register file answers in the same cycle. A system bus adapter would add its own cycle.

## Simulating

Each module has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M` and stops; each has a watchdog.

| testbench | what it exercises |
|---|---|
| `tb_realm_isolate` | blocking while isolated, completion of outstanding transfers, `isolated_o`, outstanding cap |
| `tb_realm_burst_splitter` | random bursts at random fragment lengths, fragment addresses and lengths, `w.last`, B coalescing with error codes, `r.last` masking, bursts that must not be split |
| `tb_realm_write_buffer` | AW held until the burst is complete, gap-free W out, slow-data managers |
| `tb_realm_mr_unit` | region decode, budget accounting, depletion and replenishment, throttle limits, latency sums |
| `tb_realm_unit` | FSM drain/apply, new fragment length only after the drain, one-cycle latency |
| `tb_realm_unit_bare` | the unit built without splitter and write buffer: one-cycle AW and AR, bursts pass whole, FSM, depletion |
| `tb_realm_cfg_regs` | every register, read-only errors, clamping, update/reload pulses |
| `tb_realm_bus_guard` | unclaimed errors, claim, foreign access, handover |
| `tb_realm_sys` | whole design at default parameters (see below) |
| `tb_realm_workloads` | fragment-length and budget sweeps at default parameters (see below) |

Shared pieces:

- `tb_axi_drv.svh`: AXI manager tasks;
- `tb_reg_drv.svh`: register access task;
- `tb_axi_mem.sv`: in-order AXI memory;
- `tb_rr_mem.sv`: model of a transaction-granular round-robin crossbar in front of one memory, with a 4-cycle read latency.

Example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/realm_pkg.sv tb/tb_realm_sys.sv --top-module tb_realm_sys -o sim
./obj_dir/sim
```

`tb_realm_sys` runs the top with no parameter overrides. It has three managers:

- manager 0, a "core" issuing single-beat reads and measuring their latency;
- manager 1, an accelerator DMA streaming 256-beat reads and writes (double buffering);
- manager 2, a system DMA.

The testbench goes through these phases:

1. configuration refused while unclaimed, then claimed by the core;
2. configuration of all three units over the register bus;
3. core alone;
4. contention with unsplit DMA bursts (fragment length 256);
5. DMA fragment length 1;
6. a DMA budget of 320 B per 1000 cycles per direction, with throttling;
7. a system-DMA write whose data arrives late and slowly (write buffer hold);
8. user isolation of the system DMA;
9. latency statistics read back, then a guard handover.

Results with the crossbar model:

| phase | core read latency |
|---|---|
| core alone | 6 cycles |
| contention, fragment length 256 | about 260 cycles worst case |
| contention, fragment length 1 | 10 cycles worst case |
| with a DMA budget | worst case 10 cycles; the DMA's bytes per period stay at its budget plus at most one fragment |

The latency statistics read over the register bus equal the testbench's own measurement. The testbench counts each mechanism (split, B coalesce, write-buffer hold, depletion, replenish, throttle, drain/apply, user isolation, guard error, handover) and fails if any of them never occurred.

`tb_realm_workloads` replays the two contention experiments on the same system at default parameters:

- **Fragment sweep**: the DMA's fragment length goes 256, 128, ..., 1.
- **Budget sweep**: fragment length 1, period 1000 cycles, DMA budget 8 KiB / k for k = 1..5.

| DMA fragment length | 256 | 128 | 64 | 32 | 16 | 8 | 4 | 2 | 1 |
|---|---|---|---|---|---|---|---|---|---|
| core worst-case read latency (cycles) | 260 | 132 | 68 | 36 | 20 | 12 | 9 | 11 | 10 |
| core average read latency (cycles) | 257.7 | 129.9 | 66.4 | 35.4 | 19.8 | 11.8 | 8.0 | 6.2 | 10.0 |

| DMA budget per 1000 cycles | 8192 B | 4096 B | 2730 B | 2048 B | 1638 B |
|---|---|---|---|---|---|
| core average read latency (cycles) | 10.0 | 9.4 | 8.3 | 7.8 | 7.4 |
| DMA peak bytes in one period | 5320 | 4096 | 2736 | 2048 | 1640 |

With fragment length 1, the core's worst case is 4 cycles above the single-source case. One cycle is the unit's request delay. The rest comes from the crossbar model: it serves one read at a time with its full 4-cycle latency, so a single-beat DMA read chosen just before the core's read delays it by that latency. A pipelined memory, as a real last-level cache is, would bring this difference down to about two cycles.

In the budget sweep, the DMA is held to its budget within one fragment (8 bytes). The fewer bytes the DMA may move, the less it delays the core.

Each testbench finishes in well under a second of simulation time.
