# PiPoMonitor: catching Ping-Pong cache lines with an Auto-Cuckoo filter

A cross-core cache attack on a shared last-level cache (LLC) works by evicting
a victim's line and then timing a reload of it. Under attack, the line keeps
leaving the LLC and coming back from DRAM. This back-and-forth traffic between
the LLC and memory on one line is called the **Ping-Pong pattern**.

PiPoMonitor sits inside the memory controller and watches that traffic. It
counts how often each line is fetched from memory again. When a line has come
back often enough, the monitor marks it as a *Ping-Pong line*. The LLC tags
the line. When a tagged line is later evicted, the monitor fetches it back
into the LLC on its own (a prefetch). The attacker's reload then always hits,
whether or not the victim touched the line, so the probe reveals nothing.

Counting per line needs a history table. A table keyed by address is large.
An attacker who learns its layout can also flush a chosen record out of it.
PiPoMonitor therefore uses an **Auto-Cuckoo filter**. This is a cuckoo filter
that keeps short fingerprints rather than addresses. It never refuses an
insertion: when no room can be found, it silently drops a record. Which record
goes depends on a chain of random choices, so an attacker cannot pick it.

This repository holds synthesizable SystemVerilog for the monitor: the filter
with its hash units and arrays, the request queue that links the filter to the
memory controller and the LLC, and a top level. The cores, caches, on-chip
network, the rest of the memory controller and DRAM are not included. The
LLC-side Ping-Pong tag in particular is not included; its signals are ports of
the top level.

## Block structure

```
                    pipomonitor
  acc_* ──────►┌──────────────────────┐  q_*   ┌────────────────────────────────┐
  (Access)     │      pipo_queue      │ ─────► │           acf_filter           │
  pev_* ──────►│ Access FIFO          │ ◄───── │ acf_fprint_hash  acf_hash1     │
  (pEvict)     │ pEvict delay queue   │  r_*   │ acf_hash2 (x2)   acf_lfsr      │
  pp_*  ◄──────│ (pipo_fifo)          │        │ acf_fprint_array acf_data_array│
  (tag line)   └──────────────────────┘        └────────────────────────────────┘
  pf_*  ◄───── Prefetch to the memory fetch queue
```

| File | Role |
|---|---|
| `rtl/acf_pkg.sv` | default sizes, hash seeds, and the function that generates the H3 mask rows |
| `rtl/acf_fprint_hash.sv` | address → 12-bit fingerprint |
| `rtl/acf_hash1.sv` | address → first candidate bucket |
| `rtl/acf_hash2.sv` | (bucket, fingerprint) → the other bucket |
| `rtl/acf_fprint_array.sv` | l × b entries of {Valid, fingerprint}, 2 read ports, 1 masked write port |
| `rtl/acf_data_array.sv` | l × b Security counters, same organisation |
| `rtl/acf_lfsr.sv` | 16-bit LFSR; the random source for kick choices |
| `rtl/acf_filter.sv` | the Auto-Cuckoo filter controller |
| `rtl/pipo_fifo.sv` | generic FIFO used for the Access queue |
| `rtl/pipo_queue.sv` | Access → Query, Response → Ping-Pong tag, pEvict → delayed Prefetch |
| `rtl/pipomonitor.sv` | top level |

## The Auto-Cuckoo filter

### Records and hashing

The filter has l = 1024 buckets (sets) of b = 8 entries. Each entry has three
fields:

- a Valid bit;
- an f = 12-bit fingerprint of the line address;
- a 2-bit **Security** counter.

The first two fields live in the fPrint Array and the counter in the Data
Array. Storage is 8192 × 15 bits = 15 KB.

Every address x has two candidate buckets, computed by partial-key cuckoo
hashing:

```
fp      = H_fp(x)                 12 bits
mu(x)   = H_1(x)                  10 bits
sigma(x)= mu(x) XOR H_alt(fp)     10 bits
```

The second bucket depends only on the first bucket and the fingerprint. So
`acf_hash2` applied to either bucket of a record gives the other one. This is
what lets the filter move a record without knowing its address. The same unit
computes h2 for a new address and the destination of a relocated record.

All three hashes are H3 hashes. Output bit i is the XOR of the input bits
selected by a constant mask. Mask row i of a hash is
`splitmix64(seed + (i+1) * 0x9E3779B97F4A7C15)`, truncated to the input width.
It is computed at elaboration by `acf_pkg::h3_row`. Each hash uses its own
seed, so in hardware each hash is a fixed XOR tree. The filter's structure
needs some hash but does not name one; H3 is this design's choice. Change the
seeds in `acf_pkg` to get a different, equally valid filter.

### What a Query does

A Query carries a line address. The filter reads both candidate buckets from
both arrays and compares the fingerprint with all 16 entries. There are three
cases:

1. **Hit.** Some valid entry holds the same fingerprint. Its Security is
   incremented, saturating at secThr = 3, and written back. The new value is
   the Response. If several entries match, the first in bucket mu(x), in way
   order, is used. Two different lines with the same fingerprint and bucket
   pair are the same record to the filter. This is the filter's false
   positive: the pair pushes the counter up faster than either line alone.
2. **Miss with room.** The fingerprint goes into the first free way of mu(x),
   or of sigma(x) if mu(x) is full. Security starts at 0 and the Response is 0.
3. **Miss, both buckets full.** This case is autonomic deletion, the part of
   the design that differs most from a textbook cuckoo filter:
   - The LFSR picks one of the two buckets and a way in it. The new
     fingerprint takes that entry.
   - The displaced record, with its Security value, moves to its other bucket,
     which `acf_hash2` computes from the record's current bucket and
     fingerprint.
   - If that bucket has a free way, the record goes there and the insertion
     ends.
   - Otherwise a random way there is displaced in turn, and so on.
   - Each move is one relocation. A record displaced by the MNK-th relocation
     (MNK = 4) is not moved again: it is dropped. With MNK = 0, the first
     displaced record is dropped at once.

   So an insertion never fails. The cost is that some older record disappears.
   The lost record is the end of a random walk over up to MNK + 1 buckets. To
   force out a chosen record, an attacker would need a set of about
   b^(MNK+1) = 32768 addresses. To drop it by plain flooding, the expected
   number of fresh lines is about b·l = 8192.

The Response goes out as soon as the lookup is done. Any relocations run
after it.

### Pipeline and timing

`acf_filter` follows a three-step flow: register the hashes, register the
array outputs, then compare and select. It handles one Query at a time:

| cycle | state | action |
|---|---|---|
| t | IDLE | `q_valid && q_ready`: hashes registered |
| t+1 | READ | both candidate sets read from both arrays |
| t+2 | CMP | 16 comparisons; write-back or insert; `r_valid` for one cycle |
| t+3 | IDLE | ready for the next Query, unless a relocation is needed |
| +2 per relocation | KREAD, KCMP | read the destination set, then place or displace |

A Query therefore takes 3 cycles, plus 2 cycles per relocation. Once the
filter is full, almost every new line relocates MNK times, so a Query then
takes 11 cycles. The write made in one step is always committed before the
next read, so there are no same-set hazards.

After reset, `q_ready` stays low for l = 1024 cycles while the filter writes
each set once to clear the Valid bits and the counters.

## The Queue: from the memory controller to the filter and back

`pipo_queue` connects the filter to the rest of the system.

**Access path.**
- Every request the LLC sends to DRAM is copied into an 8-entry FIFO.
- The oldest entry becomes the Query, with one Query outstanding at a time.
- When the Response equals secThr, `pp_valid`/`pp_addr` pulse one cycle
  later. The LLC should then tag the line when DRAM returns it. The pulse
  comes about 4 cycles after the Access, long before a 200-cycle DRAM reply.
- The monitor must never slow memory down. An Access that finds the FIFO
  full is therefore not recorded: `acc_drop` pulses, and the memory request
  proceeds as usual. A dropped Access is a missed count, not a missed fetch.

**pEvict path.**
- The LLC sends `pev_*` when it evicts a tagged line that was used since its
  last fill. It uses a valid/ready handshake; `pev_ready` falls when the
  8-entry queue is full.
- Each entry counts down PF_DELAY = 200 cycles. It then raises
  `pf_valid`/`pf_addr` to the memory fetch queue and holds them until
  `pf_ready`.
- The delay keeps the prefetch from competing with the writeback of the same
  line.
- Prefetches leave in pEvict order. A pEvict taken at cycle t produces its
  Prefetch at cycle t + 200 at the earliest.

The rule "prefetch a tagged line only if it was used since its last prefetch"
stops endless prefetching. It is LLC state and lives on the LLC side of the
`pev_*` port.

## Top-level interface (`pipomonitor`)

| Port | Dir | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `ready` | out | the filter has finished clearing after reset |
| `acc_valid`, `acc_addr[41:0]` | in | Access: a line address requested from DRAM |
| `acc_drop` | out | that Access could not be recorded (queue full) |
| `pp_valid`, `pp_addr` | out | Ping-Pong line: tag it in the LLC |
| `pev_valid`, `pev_addr`, `pev_ready` | in/in/out | pEvict from the LLC |
| `pf_valid`, `pf_addr`, `pf_ready` | out/out/in | Prefetch to the memory fetch queue |
| `reloc_valid`, `del_valid` | out | one pulse per relocation and per autonomic deletion (statistics) |

Addresses are 42-bit line addresses: a 48-bit physical address with 64-byte
lines.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `L` (buckets) | 1024 | source configuration |
| `B` (entries per bucket) | 8 | source configuration |
| `FP_W` (fingerprint bits f) | 12 | source configuration |
| `SEC_W` (Security bits) | 2 | source configuration |
| `SEC_THR` (secThr) | 3 | source configuration |
| `MNK` (max relocations) | 4 | source configuration |
| `ADDR_W` | 42 | this design |
| `PF_DELAY` | 200 | this design (set equal to the DRAM latency of the evaluated system) |
| `ACC_DEPTH`, `PEV_DEPTH` | 8, 8 | this design |
| hash seeds, `LFSR_SEED` | see `acf_pkg` | this design |

`L` and `B` must be powers of two. The sizes compared in the source (512×8,
1024×16, 2048×4, 2048×8, and secThr 1 or 2) are all reachable by changing
these parameters.

## Where this RTL follows the source and where it chooses

The following follow the source:
- the partial-key hashing relation;
- the field widths;
- the array organisation;
- hit, insert and Security counting;
- the incremented Security returned as the Response;
- relocation with random victims and dropping after MNK relocations;
- the Access / Query / Response / Ping-Pong / pEvict / Prefetch flow and the
  delayed prefetch.

The following are this design's choices:
- the three hash functions and the LFSR;
- the address width;
- first-free-way placement, preferring mu(x);
- relocated records keeping their Security counter;
- the one-Query-at-a-time schedule and its cycle counts;
- the clear-on-reset sweep;
- queue depths and drop-on-full for Accesses;
- the 200-cycle delay;
- the valid/ready handshakes.

The source's two descriptions of the threshold differ: one says "reaches
secThr", the other "exceeds" it. This design flags a line when Security
reaches 3. A 2-bit counter cannot exceed 3.

The drawing of the microarchitecture feeds Hash2 straight from the address.
This design feeds Hash2 from Hash1 and the fingerprint instead. As a function
of the address the result is the same, and it is the form relocation needs.

One measured difference: this filter fills faster than the published
occupancy curve. With MNK = 4, after 8.9K random insertions the published
curve is near 90 % and this RTL holds 98.9 %. Both reach 100 % by 12.5K.
Placement policy or how insertions are counted may explain the gap. The
source does not give enough detail to settle it.

## Verification

Each testbench is self-checking and ends with a `TB_RESULT checks=N
failures=M` line.

| Testbench | What it shows |
|---|---|
| `tb_acf_fprint_hash`, `tb_acf_hash1` | 2000 addresses against an independent software H3; no stuck output bits |
| `tb_acf_hash2` | reference match; `alt(alt(i)) = i`; the second bucket differs from the first |
| `tb_acf_fprint_array`, `tb_acf_data_array` | full-size arrays against a software copy; masked writes; read-before-write |
| `tb_acf_filter` | full-size filter against a record-level model (see below) |
| `tb_pipo_queue` | cycle-exact model of the Queue, with a stand-in filter: ordering, drops, Ping-Pong pulse, exact 200-cycle delay, back-pressure |
| `tb_pipomonitor` | end-to-end at default parameters (see below) |
| `tb_acf_occupancy` | occupancy vs insertions for MNK = 2, 4, 8 |
| `tb_acf_brute_force` | fresh lines needed to flush one chosen record from a full filter |
| `tb_pipomonitor_attack` | the monitor under an evict-and-reload attack (see below) |
| `tb_acf_collisions` | share of stored records that hold two or more lines, f = 6, 8 and 12 |
| `tb_acf_false_positive` | hit rate of never-seen lines on a full filter, f = 12 and f = 8 |
| `tb_acf_reverse_attack` | targeted eviction through lines that share the target's buckets, MNK = 0 and 4 |

Details of the larger testbenches:

- **`tb_acf_filter`.** The model is keyed by fingerprint and bucket pair. It
  checks every Response, every deletion, the 2-cycle latency, and the
  3 + 2·relocations cycle count. At the end it compares the arrays' contents.
  The workload is 25K Queries.
- **`tb_pipomonitor`.** All parameters are at their defaults. It checks every
  Ping-Pong report against a model of the filter, and every Prefetch for
  address and order. Capture, saturation, Access drop, relocation, autonomic
  deletion, pEvict back-pressure, Prefetch stall and Prefetch must each occur.
- **`tb_pipomonitor_attack`.** Two target lines are probed every 5000 cycles
  for 100 iterations. The test requires:
  - both lines are captured within 5 iterations (this run: iteration 3);
  - after capture, the attacker sees both lines as used in every iteration,
    whatever the key bit.

Results measured on this RTL:
- **Occupancy.** After 12.5K insertions the filter is 100 % full for MNK 2, 4
  and 8. After 8.9K it is 98.2 %, 98.9 % and 99.3 %.
- **Brute force.** Flushing a target took a mean of 9175 fills over 24
  trials (range 644 to 26799). The analytic b·l is 8192.
- **False positives.** On a full filter, 40000 never-seen lines hit at a rate
  of 0.0036 for f = 12 and 0.064 for f = 8. The bound 1 - (1 - 2^-f)^(2b)
  gives 0.0039 and 0.061.
- **Collision entries.** After 60000 fresh random lines, the share of stored
  records into which two or more lines were merged was 24 % for f = 6, 6.5 %
  for f = 8 and 0.40 % for f = 12. The design targets were about 26 %, 8 %
  and 1.4 %, measured on 6 million insertions of an unstated address stream.
  The f = 12 figure here is lower. With fresh random lines, a record only
  collects lines while it lives, which is about 8192 insertions.
- **Targeted eviction.** Here the attacker inserts lines whose first bucket is
  one of the target's two buckets. Without relocation (MNK = 0) the target
  went after a mean of 46 such lines. With MNK = 4 it took 377, about eight
  times as many, but far fewer than the b^(MNK+1) = 32768 of the simple
  analysis. The reason is that the attacker's lines that get relocated still
  name the target's buckets as their other bucket, so relocation walks
  keep coming back there. Treat the 32768 figure as optimistic.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_pipomonitor rtl/acf_pkg.sv tb/tb_ref_pkg.sv tb/tb_pipomonitor.sv
./obj_dir/Vtb_pipomonitor
```

Replace the module and file name for any other testbench. Each one runs in a
few seconds. The testbenches use hierarchical references into
`dut.u_filter` and `dut.u_fpa`/`dut.u_da`. Keep those instance names if you
restructure.

## Limits

- Only the monitor is here. The LLC changes it relies on are not:
  - setting the Ping-Pong tag on fill when `pp_valid` names the line;
  - the per-line "used since fill" bit;
  - sending pEvict only for tagged, used lines.

  The memory controller must also copy its DRAM requests to `acc_*` and
  accept `pf_*` into its fetch queue.
- The filter handles one Query at a time. At 11 cycles per Query on a full
  filter, sustained rates above one Access every 11 cycles lose records
  (`acc_drop`). No rate requirement is given to compare against.
- The arrays are plain register arrays for synthesis to map. There is no
  SRAM macro wrapper.
