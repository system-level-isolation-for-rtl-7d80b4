# A modified Worlds Checker: target-side access control by World ID

In a mixed-criticality SoC, several software domains share a bus. Each
domain (a "world") tags the transactions it issues with a small number, its
World ID (WID). In front of each protected memory or peripheral sits a
*checker*. The checker compares every transaction's address and WID with a table
of rules and decides whether the access may proceed.

The standard RISC-V Worlds Checker gives each rule one address and one
permission bitmap with two bits (read, write) per world. That bitmap grows
with the number of worlds: 256 bits per rule at 128 worlds. Its address modes
(TOR, NA4, NAPOT, taken from PMP) also spend slots on sparse memory maps.

This design is a *modified* Worlds Checker (M-WC) that changes the rule
format in three ways:

* **Start–end regions.** A rule can name its region by an explicit start and
  end address (mode SE). This comes in addition to TOR, NA4 and NAPOT.
* **Explicit (WID, r, w) entries.** Each rule holds a few entries of the form
  "WID *n* may read / may write". These replace the per-world bitmap. The rule
  size stays the same however many worlds there are.
* **A general-read bit (GR).** When set, every world may read the region. This
  needs no entry per reader.

The checker evaluates all rules in parallel in one clock cycle. Rules have no
priority order: an access is allowed if *any* rule that covers it grants
the permission. Rules therefore stack ("accretive overlay"). A region can be
readable by everyone through one rule and writable by one world through a
second rule over the same addresses.

An uncontended transaction leaves the checker two clock cycles after it
entered. Each AXI read or write request pays this fixed cost once. Its data
beats and responses pass through with no added delay.

## Block structure

```
  initiator AXI ──AR──► Ax handler (read) ─┐                ┌──► target AXI
                ──AW──► Ax handler (write)─┤  round-robin   │
                                           ├─► arbiter ─► checker
                                           │   (1 check/cycle)   ▲ decoded rules
        route select (target / bus error / poison)              │
                                           ▼                    │
                ──W───►        AXI demux ─────► error handler   register map ◄── config port
  initiator  ◄─R/B──           (W follows AW,      (DECERR or      (slots, decode,
                                R/B from where      poisoned data)  error record)
                                request went)
```

| File | Block |
|---|---|
| `rtl/wc_pkg.sv` | widths, AXI channel structs, rule encodings, register offsets, `decode_slot()` |
| `rtl/wc_top.sv` | the checker IP: initiator port, target port, configuration port |
| `rtl/wc_ax_handler.sv` | one per address channel: holds a request, gets it checked, forwards it with a route |
| `rtl/wc_rr_arbiter.sv` | round-robin arbiter, read vs. write handler, for the single checker |
| `rtl/wc_checker.sv` | computes the byte range of a burst; runs one analyzer per slot; combines the results |
| `rtl/wc_slot_analyzer.sv` | one slot: region test and WID-entry lookup |
| `rtl/wc_regmap.sv` | slot registers, decode to start/end form, fixed first/last slot, lock, error record |
| `rtl/wc_axi_demux.sv` | sends each request to the target or the error handler; steers W; returns R/B |
| `rtl/wc_err_handler.sv` | answers denied transactions |

## Rules ("slots")

There are `NUM_SLOTS` slots, 16 by default. Each slot takes 64 bytes of the
configuration space:

| Offset | Size | Field | Meaning |
|---|---|---|---|
| 0x00 | 8 | `addr` | region address (start address in SE mode) |
| 0x08 | 8 | `eaddr` | end address, used in SE mode only |
| 0x10 | 4 | `cfg` | mode and control bits |
| 0x14 | 12 | – | reserved, reads 0 |
| 0x20 + 4k | 4 | `perm`k | permission entry k, k < `NUM_PERMS` (4 by default) |
| 0x30 | 16 | – | reserved, reads 0 (holds perm4–perm7 when `NUM_PERMS` = 8) |

**`cfg`:**

| Bits | Field | |
|---|---|---|
| 2:0 | A | 0 OFF, 1 TOR, 2 NA4, 3 NAPOT, 4 SE |
| 8 | ER | a denied read in this region gets a bus error (else poisoned data) |
| 9 | EW | the same for writes |
| 24 | GR | every WID may read the region |
| 31 | L | lock the slot until reset |

**`perm`:**

| Bits | Field | |
|---|---|---|
| 6:0 | wid | the world this entry is for (0–127) |
| 30 | w | that world may write |
| 31 | r | that world may read |

The reset value of a perm entry is wid 0, r=1, w=1. Software normally
rewrites every entry of a slot it enables. An entry with r=0 and w=0 grants
nothing.

### Address encoding

`addr` and `eaddr` hold a byte address shifted right by two, as in RISC-V
PMP. A region is always a multiple of 4 bytes. The decoded regions are
half-open intervals `[start, stop)`:

| Mode | start | stop |
|---|---|---|
| TOR | `addr` of the slot below, << 2 | `addr` << 2 |
| NA4 | `addr` << 2 | start + 4 |
| NAPOT | `addr` with its trailing ones cleared, << 2 | start + 2^(t+3), where t is the number of trailing ones |
| SE | `addr` << 2 | `eaddr` << 2 |

For example, a 4 KiB NAPOT region at 0x1000_0000 is written as `addr =
(0x1000_0000 >> 2) | 0x1FF`. An SE region with `eaddr <= addr` is empty.
`stop` is 65 bits wide so that a region can end at 2^64.

### Fixed first and last slot

Slot 0 is read-only. Its address is the lower bound of the protected space
(parameter `BASE_ENC`, 0 by default) and it is always OFF. It exists only to
serve as the lower bound of a TOR slot 1.

The last slot's address is the upper bound (`TOP_ENC`, 2^64 >> 2) and its
mode is always TOR. It therefore covers everything from the slot below it up
to the top of the address space. Its ER/EW/GR/L bits and perm entries can be
written; its `addr` and A field cannot.

Published area results for this checker credit these two fixed slots for the checker's low
cost at very small slot counts.

### Decoding at write time

The checker never looks at the encoded fields. When a slot's register changes,
`decode_slot()` turns it into `{en, start, stop, gr, er, ew}`, and a register
holds that result. The analyzers then only compare 65-bit bounds. The decoded
table follows a configuration write one clock later.

A transaction checked in that cycle still sees the old rule. Transactions are
not stalled while rules are rewritten. Software that needs an atomic change
must quiesce the initiators first.

### Locking

A slot with L=1 ignores all further writes until reset. If it is a TOR slot,
the lock also freezes the `addr` of the slot below it, because that address is
the locked region's lower bound.

## The decision

For a request with address `a`, burst length `len`, beat size `size` and
burst type, the checker first works out the bytes the burst touches:

* INCR: `[a, a + (len+1)·2^size − 1]`.
* FIXED: one beat.
* WRAP: the aligned wrap window.

Then each slot's analyzer computes:

* **hit:** the first byte lies in the slot's region.
* **match:** the whole burst lies in the region. A burst that crosses out of a
  region is not covered by that region.
* **r_ok:** match, and (GR, or an entry with this WID and r=1).
* **w_ok:** match, and an entry with this WID and w=1.

An access is **allowed** if any slot gives `r_ok` (for a read) or `w_ok` (for
a write). Overlapping slots only add rights; none takes rights away.

A denied access is answered with a **bus error** (AXI DECERR) in either case:

* its first byte lies in no enabled slot, or
* any slot containing its first byte has ER (read) or EW (write) set.

Otherwise it gets **poisoned data**: a read returns zeros with OKAY, and a
write's data is discarded and answered with OKAY.

A violation also fills the error record, unless it already holds an
unacknowledged violation. The record keeps the WID, the direction and the
address.

## Timing

The two Ax handlers each hold at most one request:

| Cycle | Read handler (AR) / write handler (AW) |
|---|---|
| 0 | Handshake on the initiator port. The request is registered. |
| 1 | The handler asks the arbiter. When granted, the checker decides combinationally, and the handler registers the verdict and the route. |
| 2 | The request is offered to the demux and passes to the target or the error handler. |

If both handlers ask in the same cycle, the round-robin arbiter grants one and
the other waits one cycle. So the worst case is three cycles.

W beats of a write are released in the cycle their AW passes the demux (cycle
2), never earlier. Write data cannot reach the target before the write is
allowed. R and B return combinationally.

A handler accepts its next request once the current one has left, so a
stream of back-to-back single-beat requests sustains one request every three
cycles per channel. The published evaluation measures only single, isolated requests. Its
overhead figure (two cycles for reads and for writes) is what the end-to-end
testbench checks.

## Keeping responses in order

The demux sends each request either to the target or to the error handler.
AXI requires responses with the same ID to return in order, and the two ports
answer at different speeds. To keep that order, the demux enforces a simpler
rule per direction: transactions may be outstanding at only one port at a
time. A read for the error handler waits until all reads outstanding at the
target have returned their last beat, and the reverse.

Up to `MAX_TRANS` (8) transactions may be outstanding per direction. This rule
is stricter than per-ID tracking. It costs throughput only when allowed and
denied traffic interleave.

## Configuration port and register map

The configuration port is a simple single-cycle 32-bit register bus:

* `cfg_req_i` and `cfg_we_i` qualify the access.
* `cfg_rdata_o` is valid in the same cycle.
* `cfg_err_o` flags an unmapped offset.

| Offset | Register |
|---|---|
| 0x00 | NSLOTS (RO) |
| 0x04 | NPERMS (RO) |
| 0x08 | ERRCAUSE: wid [6:0], read [8], write [9], valid [31]. Any write clears it. |
| 0x10 / 0x14 | ERRADDR low / high |
| 0x40 + 0x40·i | slot i (layout above) |

The checker has no interrupt output. Software polls ERRCAUSE.

## Ports and parameters of `wc_top`

* **`slv_req_i` / `slv_rsp_o`:** the initiator side, as AXI4 request and
  response structs (`wc_pkg::axi_req_t`, `axi_rsp_t`). The WID travels in the
  AR/AW `user` field (7 bits).
* **`mst_req_o` / `mst_rsp_i`:** the target side. Only allowed transactions
  appear here.
* **`cfg_*`:** the configuration port above.
* **Reset:** `rst_ni` is an active-low asynchronous reset.

| Parameter | Default | |
|---|---|---|
| `NUM_SLOTS` | 16 | slots. Slot 0 and the last slot are fixed, so 14 are freely usable |
| `NUM_PERMS` | 4 | (WID, r, w) entries per slot, 1 to 8. Entries 0–3 sit at 0x20–0x2C; entries 4–7 take the otherwise reserved words 0x30–0x3C |
| `MAX_TRANS` | 8 | outstanding transactions per direction in the demux |
| `CFG_AW` | 16 | configuration address width |

The package fixes these widths:

* address: 64 bits;
* data: 64 bits;
* AXI ID: 4 bits;
* WID: 7 bits (128 worlds).

Sharing is limited. One slot can name at most `NUM_PERMS` worlds with
individual rights. Any number of worlds can read through GR. Write sharing
beyond `NUM_PERMS` worlds needs further overlapping slots.

## Where this design departs from the source description, or fills gaps

The following parts follow the published M-WC proposal:

* the slot layout;
* the perm format;
* the positions of the A and GR bits;
* the parallel, priority-free evaluation;
* the fixed first and last slots;
* decoding at configuration time;
* the two-cycle overhead;
* the two answers to a violation.

The following are this design's own choices:

* **Mode numbers.** TOR/NA4/NAPOT use the PMP numbers. SE is 4.
* **cfg bits ER (8), EW (9) and L (31).** The proposal says rules carry
  error-reporting control bits and can be locked, but gives no positions.
* **Address encoding.** SE uses the same >>2 encoding as the other modes, and
  its end is exclusive.
* **Burst coverage.** A burst must lie wholly within one region to be covered.
* **Choice of response.** The rule "bus error if no slot contains the first
  byte, or if any containing slot sets ER/EW" is this design's.
* **Poisoned reads** return all-zero data.
* **Ax handlers.** Each holds one request at a time.
* **Demux.** The one-port-per-direction ordering rule replaces a
  general-purpose AXI demultiplexer.
* **Configuration bus and global registers.** The bus protocol, the error
  record and their offsets are invented here.
* **No reconfiguration stall.** Transactions are not stalled during
  reconfiguration. The source design does not implement this either.

## Verification

Every block has a self-checking testbench in `tb/` that prints `TB_RESULT
checks=N failures=M`. Each testbench has a cycle watchdog.

| Testbench | What it checks |
|---|---|
| `tb_wc_slot_analyzer` | random regions, bursts and perm entries against a reference |
| `tb_wc_checker` | directed overlay/GR/error-type cases and random tables (8 slots) |
| `tb_wc_regmap` | register read-back, every decode mode, fixed slots, lock, error record; 400 random slot writes checked against a reference decoder |
| `tb_wc_rr_arbiter` | fairness and one-hot grants for 2 and 3 requesters |
| `tb_wc_ax_handler` | routing by verdict, the two-cycle timing, back-pressure |
| `tb_wc_err_handler` | DECERR vs. poisoned answers, burst lengths, `last` |
| `tb_wc_axi_demux` | routing, W never ahead of its AW, port-switch stalls |
| `tb_wc_top` | end to end at the default parameters (see below) |
| `tb_wc_stress` | default parameters, randomly stalling target: 300 reads and 300 writes issued back to back on all five channels at once, mixing allowed, poisoned and bus-error outcomes; every response checked in order, and only allowed data reaches the target |
| `tb_wc_sizes` | 2, 32 and 64 slots, and 16 slots with 8 perm entries, side by side; WIDs across 0..127; outcome and two-cycle checks at each size |

`tb_wc_top` runs at the default parameters. It uses a behavioural AXI memory
(`tb_axi_mem`) as the target. It programs:

* every address mode;
* a GR region;
* an overlay;
* a locked slot;
* both error responses.

It then checks:

* directed and random accesses against a reference model;
* the two-cycle latency;
* arbiter contention;
* demux port-switch stalls;
* the error record.

It counts each of these mechanisms and fails if one never occurred.

To run one testbench with Verilator 5 from the repository root:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv rtl/wc_pkg.sv tb/tb_wc_top.sv --top-module tb_wc_top
./obj_dir/Vtb_wc_top
```

Lint reports a few warnings, which are expected:

* **Synchronous use of the reset.** The assertions are disabled during reset,
  and lint reports this as the reset being used synchronously.
* **Unused request fields.** The checker reads only the address, length,
  size, burst type and WID of a request.
* **Unused error bits in the analyzer.** The analyzer receives the error
  bits but does not use them; the checker reads them directly.

Each module's header comment notes its own cases.

### Known limitations

* Encoded addresses beyond 2^64 saturate to 2^64. For example, an SE slot
  with `eaddr = 2^62` ends at the top of the address space.
* Rule changes take effect one clock after the write.
* Transactions are not stalled during a rule change.
* Throughput per channel is one request every three cycles, because each
  handler holds one request at a time. Burst data is not slowed.
* There is no interrupt on violations.
