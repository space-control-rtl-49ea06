# Space-Control host hardware: process-level isolation for shared CXL memory

Several hosts can map the same pool of CXL-attached memory (the *shared
disaggregated memory*, SDM). The usual protections do not reach across
hosts. Page tables belong to each host's OS. Memory-device access control
sees hosts, not processes. A compromised kernel on one host can point any of
its processes, or itself, at memory another tenant owns.

Space-Control moves the decision into hardware at each host's memory egress
point, and ties it to a *process identity* that the OS can neither mint nor
forge:

1. A trusted process receives a 7-bit hardware process ID (**HWPID**) from
   on-chip hardware (SPACE), not from the OS.
2. A fabric manager (FM) grants ranges of the SDM to (host, HWPID) pairs. It
   records the grants in a sorted **permission table** stored in the SDM
   itself. It also issues a public label `L_exp` that binds the process'
   page-table base and range to its HWPID.
3. On every context switch the process must re-prove who it is (`ARM_LABEL`).
   SPACE recomputes the label from the live CPU context and compares it.
4. While authenticated, every physical address the process emits carries its
   HWPID in extra address bits (the **A-bits**).
5. A **permission checker** after the last-level cache looks up every SDM
   access in the table. It stalls stores until they are permitted. It sends
   loads at once but withholds their data if permission is refused. It raises
   an interrupt on a violation.
6. Local DRAM pages of trusted processes are encrypted with a host key, so a
   kernel that aliases them sees only ciphertext.

This repository holds synthesizable SystemVerilog for the host-side
hardware (SPACE, the A-bit tagging, the permission checker with its
permission cache, and the local memory encryption engine), plus testbenches.
The CPU, the CXL link, the memory devices and the FM are outside. They appear
as ports, or as behavioural models in the testbenches.

```
            ctx_switch/cr3/pcid/ring         MMIO doorbells
                      |                            |
                +-----v----------------------------v-----+
                |  space_engine (SPACE)                  |
                |   free_hwpid_list  lexp_store          |
                |   host_key_engine  mono_counter        |
                |   usequencer -- label_mac (SipHash)    |
                +--+---------+-----------+---------^-----+
          label_reg,V   cur_hwpid   alloc_mask,K   | public label records
                   |         |           |         |
  PA from LLC -->  abit_tagger --{HWPID,PA}--> perm_checker ----> CXL downstream
                                               |  perm_cache  | <--- CXL upstream, BISnp
                                               |              |
                                               +-- local -----> mem_encrypt_engine --> local DRAM
```

## Identities: HWPIDs and A-bits

A HWPID is a PCID/ASID value below 128. HWPID 0 means "untrusted". That
leaves 127 trusted processes per host, and the ID fits in the seven address
bits above a 41-bit physical address. `free_hwpid_list` holds the free IDs in
a 128-deep FIFO, filled with 1..127 at reset:

* `GET_NEXT_PID` pops an ID.
* `RELEASE_PID` pushes one back, but only an ID that is currently allocated.
  A double or forged release therefore cannot create two owners of one
  identity.
* The set of allocated IDs is kept as a 128-bit vector, `HWPID_local`. The
  checker ANDs it with the table's per-entry HWPID mask. A HWPID that was
  released on this host matches no entry, even one the table still lists.

`abit_tagger` builds the 48-bit extended address `{HWPID[6:0], PA[40:0]}`. It
inserts the running process' HWPID only while that process is authenticated
(V = 1) and the core is in ring 3. Otherwise the A-bits are zero.

## Authenticating a process (SPACE)

SPACE keeps the 64-bit host key `K_host` (written once, then locked), a
64-bit monotonic counter, and one binding per HWPID: `L_exp` together with the
range it was issued for. Bindings arrive as *public label records*. These are
64-byte lines in the public-label area of the SDM. When a permitted load
returns one of them, the permission checker forwards it to SPACE. SPACE keeps
a record only if three conditions hold:

* the record names this host;
* its HWPID is non-zero;
* that HWPID is allocated here.

| field       | bits      |
|-------------|-----------|
| L_exp       | [63:0]    |
| HWPID       | [70:64]   |
| host_id     | [79:72]   |
| range start | [191:128] |
| range size  | [255:192] |

The micro-sequencer (`usequencer`) does the per-switch work.

* **Context switch.** Latch `BASE_P` (CR3) and the PCID and advance the
  counter. The label register and V are cleared. Any label computation in
  flight is abandoned.
* **Leaving ring 3.** The label register and V are cleared immediately, so
  kernel code never runs with a trusted identity.
* **`ARM_LABEL` from ring 3**, for an allocated HWPID:
  1. `L_host = MAC(BASE_P, HWPID, ctr)` goes into the label register. It is
     fresh for this context switch only, because the counter has moved.
  2. SPACE recomputes `MAC(host_id, HWPID, BASE_P, range_start, range_size)`
     from the live context and the stored range.
  3. It sets V only if the result equals the stored `L_exp`.

  A process that reuses an authorised HWPID under another page-table base,
  or on another host, fails step 3.
* **`ARM_LABEL` from the kernel**, or for an unallocated HWPID, is refused and
  reported by a one-cycle `arm_reject` pulse.

The MAC is SipHash-2-4 over whole 64-bit words, computed by `label_mac` at one
SipRound per cycle. It is keyed with `{K_host, K_host}`, and the first
message word of step 2 is `{48'b0, host_id, 1'b0, HWPID}`.

Timing:

* a MAC of n words is ready 2(n+1)+5 cycles after its start;
* the label register is loaded 14 cycles after the `ARM_LABEL` edge;
* V follows 15 cycles later, 29 cycles after the `ARM_LABEL` edge.

The doorbells are byte offsets in a small MMIO window:

| offset | name          | access | effect                                         |
|--------|---------------|--------|------------------------------------------------|
| 0x00   | GET_NEXT_PID  | read   | returns a free HWPID, 0 if none                |
| 0x08   | RELEASE_PID   | write  | `wdata[6:0]` is freed and its binding dropped |
| 0x10   | ARM_LABEL     | write  | authenticate the running process (ring 3 only) |

## The permission table in shared memory

The checker expects this layout at the start of the SDM window. The window
is 16 GiB at `SDM_BASE = 2^40`:

| offset              | size    | contents                                             |
|---------------------|---------|------------------------------------------------------|
| 0                   | 128 B   | header: status, lock owner, host count, proposed update, initiator; **Table Count** (32 bit) at bytes 84..87 |
| 128                 | 4 KiB   | public label records                                 |
| 128 + 4 KiB         | 256 MiB | permission table: `entry_t`, 64 B each, sorted by start |

Access rules for each region:

* **Header and labels:** open to every host and process. Hosts post
  proposed updates and read their labels there.
* **Table window:** refused to all host accesses. Only the FM writes the
  table.

The window is sized for the worst case of one entry per 4 KiB page:
16 GiB / 4 KiB × 64 B = 256 MiB.

`entry_t` (`spc_pkg`) is 512 bits, LSB first:

| field              | bits      | width |
|--------------------|-----------|-------|
| range start (byte) | [63:0]    | 64    |
| range size (bytes) | [124:64]  | 61    |
| valid              | [125]     | 1     |
| r/w                | [126]     | 1     |
| host mask          | [382:127] | 256   |
| HWPID mask         | [510:383] | 128   |
| spare              | [511]     | 1     |

Ranges must not overlap and must be sorted by start, as the FM keeps them.
An access is permitted when all of the following hold:

* its PA lies in `[start, start+size)` of an entry;
* the entry is valid;
* the entry's host-mask bit for this host is set;
* the entry's HWPID-mask bit for the access' HWPID is set;
* that HWPID is in `HWPID_local`;
* for a store, the r/w bit is set.

If no entry contains the PA, or the HWPID is 0, the access is refused.

## The permission checker

`perm_checker` sees every access below the LLC. Addresses outside the SDM
window go to local memory in the same cycle. Their bit 42 (`HPA[42]`) is set
when the HWPID is non-zero, which tells the encryption engine to act. Each SDM
access takes one of `N_PSHR` = 32 **slots**, in program order.

A slot has two roles:

* **PSHR** (permission status holding register): it holds the address,
  HWPID, command and the bounds `[lo, hi)` of its own binary search.
* **Response-buffer entry**: it holds the store line, and later the load data.

### Lookup

1. **Table Count.** A new slot waits until the checker holds the Table Count.
   The checker reads the header line itself after reset, and again after a
   BISnp to that line. The slot then starts with `lo = 0`, `hi = count`.
2. **Probe choice.** Each cycle the lowest-numbered slot that is ready to
   probe computes `mid = (lo+hi)/2` and the entry address
   `TABLE_BASE + 64·mid`.
3. **Cache hit.** The probe looks in the permission cache (`perm_cache`,
   fully associative, 256 × 64 B = 16 KiB). On a hit the search step is
   applied in the same cycle:
   * `PA < start`: set `hi = mid`;
   * `PA ≥ start+size`: set `lo = mid+1`;
   * otherwise the entry decides;
   * `lo ≥ hi` means no entry contains the PA, and the access is refused.
4. **Cache miss.** The checker reads the entry from the SDM with the reserved
   transaction tag `0x20`. A slot that needs an entry already being fetched
   joins that read instead of sending another. When the line arrives, it
   fills the cache and advances every slot waiting for it in the same cycle.
   A probe that targets a line on the very cycle it arrives uses it directly.

A binary search keeps revisiting the same upper nodes of the table, so these
stay cached. A cold lookup over the worst-case table (2^22 entries) takes at
most 23 reads.

### Enforcement

Data requests leave the checker in program order, one per cycle. The arbiter
order is: Table Count read, then table read, then data request.

* **Loads** are sent as soon as they reach the issue point, while their
  lookup is still running. When both the data and the permission are in,
  the slot retires. A refused load returns zeros.
* **Stores** wait at the issue point until their lookup ends. A refused
  store is dropped and never reaches the SDM. A load behind a waiting store
  also waits, so the order of accesses is preserved.
* **Retirement.** Slots retire in order on `cresp`, with `violation` set
  for a refused access. A refusal also pulses `irq` for one cycle.
* **Label forwarding.** A permitted load whose address lies in the public
  label area is also handed to SPACE as a label record.
* **BISnp.** A back-invalidate snoop from the device removes the matching
  line from the permission cache. The next lookup re-reads the updated
  entry.

`ev` gives one pulse per event:

* cache hit or miss;
* merged probe;
* Table Count read;
* load sent before its permission was known;
* store stalled;
* violation;
* label forwarded;
* encrypted local access.

Timing with the lookup path cached and no backpressure: a load goes out one
cycle after it is accepted. A store goes out after `2 + probes` cycles.

## Local memory encryption

`mem_encrypt_engine` sits between the checker and local DRAM. It XORs the
store data of lines with `HPA[42] = 1` with a keystream, and does the same
to read data returning with that bit. The keystream is derived from `K_host`
and the line address:

`ks[i] = SplitMix64(K_host ^ (line·8 + i) ^ (i+1)·0x9E3779B97F4A7C15)`, for
the eight 64-bit words i of a line.

It is combinational, so it adds no cycle. It provides the function and the
timing of an encryption engine, but it is not a vetted cipher. It gives no
integrity, and the same line always gets the same keystream. A real design
would substitute an AES-XTS-class engine behind the same ports.

## Top-level interface (`space_control_top`)

| group          | signals                                                         |
|----------------|-----------------------------------------------------------------|
| key            | `prov_wr`, `prov_key`, `key_locked` (write-once K_host)          |
| doorbells      | `mmio_valid/we/addr/wdata/rdata`                                 |
| core context   | `ctx_switch`, `cr3`, `pcid`, `ring`; out: `label_reg`, `v_bit`, `arm_reject` |
| core memory    | `creq_valid/ready`, `creq_pa`, `creq_cmd`, `creq_wdata` (untagged PA from the LLC); `cresp_valid`, `cresp` (remote, in order); `lresp_valid`, `lresp` (local) |
| local DRAM     | `mem_valid/ready`, `mem_req`, `mem_resp_valid`, `mem_resp`       |
| CXL            | `dreq_valid/ready`, `dreq` (address, LD/ST, 6-bit tag, line); `uresp_valid`, `uresp`; `bisnp_valid`, `bisnp_addr` |
| status         | `irq`, `ev`                                                      |

Ready and valid follow the usual handshake.

* The checker accepts one core request per cycle.
* `creq_ready` is combinational.
* Upstream responses may come back in any order. They are matched by tag.
* For SDM loads the device must return the address it was given. It sends
  nothing for stores.

Parameters are `N_PSHR` (32) and `CACHE_ENTRIES` (256). The address map and
field widths are in `spc_pkg.sv`.

## Where this design departs from the paper, and what it leaves out

* **Label check.** The two label formulas MAC different fields under
  different keys, so they cannot be compared directly:
  * `L_exp = MAC_KFM(host, HWPID, BASE_P, range)`;
  * `L_host = MAC_Khost(BASE_P, HWPID, ctr)`.

  Here `K_host` stands for the key SPACE shares with the FM. `L_exp` is
  verified by recomputing its own MAC from the live context, while `L_host`
  is kept in the label register as the per-switch label.
* **MAC.** SipHash-2-4 replaces the suggested HMAC/CMAC, because its 64-bit
  tag matches the 64-bit label registers.
* **Extended address.** It follows the `{HWPID 7, PA 41}` split of the
  checker's diagram, not the VPN/offset drawing of the SPACE figure.
* **Table position.** The table starts after the 4 KiB public-label area, as
  drawn, not at byte 128 as one caption states.
* **Address map and encodings.** The SDM base, the doorbell offsets, the
  `entry_t` bit order, the label record format and the transaction tags are
  this design's own.
* **Slots and comparators.** The PSHRs and the 32-entry response buffer are
  merged into one set of 32 slots. Each slot compares in parallel, where the
  paper counts five shared comparators.
* **One core.** One label register, V bit and counter are modelled. A
  multi-core host would replicate the sequencer state per core.
* **Encryption.** The encryption engine is a placeholder cipher (see above).
* **Outside the RTL:** the CPU, the FM (approval, sorting, label issue), the
  CXL port and PHY, the memory devices and the user-space driver. A table
  line that is already being fetched when its BISnp arrives is filled as
  read. As in the paper, revocation takes effect with the BISnp, not before.

## Verification

Each module has a self-checking testbench in `tb/` named `tb_<module>`.
Expected values are computed independently of the design:

* `tb_ref_pkg` has a software SipHash, including the published test vectors,
  the keystream, and packers for table entries and label records;
* `sdm_model` is a shared-memory model with random latency, out-of-order
  responses and backpressure.

What the testbenches cover:

* `tb_perm_checker` runs thousands of random accesses against a 40-entry
  table. It compares every permission with a linear scan of the table, and
  every load with a shadow copy of memory. It confirms that refused stores
  never reach memory. It also covers a table update followed by BISnps, and
  checks the load and store issue latencies.
* `tb_space_engine` covers HWPID allocation and release, label delivery,
  authentication timing (14 and 29 cycles) and the refusal cases.
* `tb_space_control_top` runs the whole flow at the default sizes:
  * provisioning and HWPID allocation;
  * label interception and authentication, including an impostor that fails;
  * permitted and refused accesses;
  * a locally encrypted page that another process reads only as ciphertext;
  * an FM revocation followed by a BISnp;
  * random traffic from trusted and untrusted processes.

  It counts every mechanism and fails if one never occurs. It runs in a few
  seconds.
* `tb_workload_table` runs the checker at its default sizes under the two
  table shapes of the evaluation. Each gets 3000 accesses, half streaming
  and half random:
  * **1e**, one entry for the whole range: the entry is read once.
  * **wc**, one entry per 4 KiB page, 65536 entries: every lookup stays
    within log2(N)+1 = 17 probes.

  It prints cycles and the cache miss ratio; in the reference run wc misses
  in the permission cache about a third of the time. The full 16 GiB
  worst case (4 Mi entries) is six probes deeper and was not simulated.

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

## Simulating

Verilator 5 with timing support:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/spc_pkg.sv tb/tb_ref_pkg.sv tb/tb_space_control_top.sv \
    --top-module tb_space_control_top -Mdir obj
./obj/Vtb_space_control_top
```

To run another testbench, replace the top file and module name. Lint a module
with `verilator --lint-only -Wall -Irtl rtl/spc_pkg.sv rtl/<module>.sv`.

The remaining lint warnings fall into three groups:

* unused bits of wide structs, such as table fields the checker does not
  read;
* the unconnected `wr_ok` output of the label store;
* `SYNCASYNCNET` on `rst_n`. The reset is asynchronous in the flops, and the
  same signal disables the concurrent assertions.
