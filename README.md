# ExPAND: an expander-driven, topology-aware LLC prefetcher for CXL-SSDs

An SSD attached to a host as CXL memory (a *CXL-SSD*) gives a lot of
byte-addressable capacity. But a load that misses the last-level cache (LLC)
and goes to it takes microseconds, not the ~100 ns of local DRAM. Each CXL
switch between the host and the device adds more. A host-side prefetcher
cannot close that gap. It would need a large model to predict irregular
address streams. It also cannot know how far away, in time, each device
sits.

This design moves the prefetch decision into the device. It has two halves:

* The **reflector** sits in the host's CXL root complex, next to the LLC
  controller. It does three things:
  * It tells the device what the host is doing: the program counter (PC) of
    every load that goes to the device, and every access the LLC served
    itself.
  * It learns at enumeration how many switches lie between it and each
    device.
  * It holds a small 16 KB buffer. The device pushes prefetched lines into
    this buffer, and the LLC controller checks it before it sends a miss
    out.
* The **decider** sits in the CXL-SSD controller. It predicts *which* line
  the host wants next (an external ML address predictor does this) and
  *when* the host will want it (a small timing predictor in RTL does this).
  It then sends the line up early enough that it arrives just in time. How
  early depends on the device latency plus the latency of the switches,
  which the reflector measured.

The messages between the two halves use CXL.mem and CXL.io. Two opcodes are
added in the custom opcode space that the CXL specification leaves free:

| direction | channel | new opcode | carries |
|---|---|---|---|
| host → device | M2S RwD | `MemRdPC` | a read that missed the LLC, with `{pid, PC}` in the payload |
| device → host | S2M BISnp | `BISnpData` | a back-invalidation snoop that is followed by a data payload: the prefetched line |
| host → device | CXL.io | hit notification | a line address the LLC hit, so the device still sees the access |
| host → device | CXL.io config write | end-to-end latency register | device latency + switch latency, in cycles |

The RTL models both halves joined back to back in one top module,
`expand_top`. Parts that the design uses but does not define are outside
the RTL. Their signals are ports of the top:
* the transformer address predictor;
* the decision-tree behaviour classifier;
* the LLC itself;
* the SSD's backend media;
* the switches and the link.

```
            host (CXL root complex)                        CXL-SSD controller
  +------------------------------------------+     +------------------------------------------------+
  | reflector                                |     | decider                                        |
  |                                          |     |                                                |
LLC req --> reflector_req_path --(lookup)--> |     |  pid_pc_hash --> ap_in_* ----> [address        |
LLC rsp <--   |        reflector_buffer 16KB | M2S |  behavior_change_detector       predictor]     |
  |           |        ^ (insert/inval)      |RwD  |    cls_window --> [classifier] --> cls_category |
  |           +-- MemRdPC / MemWr -----------+---->+--> timing_predictor --> timeliness_unit        |
  |           +-- CXL.io hit notify ---------+---->+-->   (next arrival)      (next - e2e) --pf_go-->|
  |  bisnp_receiver <-- BISnpData + payload -+<----+--  decider_backend_ctrl <-- pa_* (addresses)   |
  |       |      ----- BIRsp ----------------+---->+-->       |  ^                                  |
  |       +--> MemData to the LLC            | S2M |          v  |  be_*  --> [backend media]       |
  | switch_depth_tracker <-- enumeration     |     |  ssd_config_space (DSLBIS, E2E registers)      |
  | topology_latency_unit -- cfg rd/wr ------+<--->+--> e2e_lat -----> timeliness_unit              |
  +------------------------------------------+     +------------------------------------------------+
```

## 1. The timing chain: from an access to a prefetch that lands on time

This is the core of the design. Most of the subtle timing lives here.

**Time base.** The decider has a free-running 64-bit cycle counter, `now`.
Every latency in the design is in the same clock cycles: the switch latency,
the device latency and the end-to-end latency.

**Arrivals.** The decider counts an *arrival* on either of two events:
* a `MemRdPC` reaches the device;
* a CXL.io hit notification reaches it.

The second kind matters. Without it, the device only sees the misses. Once
prefetching works, misses become rare, so the gaps the device sees would
grow and the predicted rate would collapse. The reflector therefore
forwards:
* every read that hit the LLC (`LLC_HIT` requests on the LLC port);
* every read that it served from its own buffer.

**Timing predictor** (`timing_predictor`). This is a ring of `ENTRIES = 10`
timestamps of 8 bytes each, 80 bytes in total. With `n` valid entries:

```
next_arrival = t_newest + (t_newest - t_oldest) / (n - 1)        (n >= 2)
```

`(t_newest - t_oldest)/(n-1)` is the mean of the last `n-1` gaps. It needs
only one subtractor and one divider, instead of a sum over the window. The
divide is combinational; its divisor is at most `ENTRIES - 1`. `next_arrival`,
`pred_valid` and a one-cycle `pred_new` pulse appear at the clock edge after
the arrival.

**Timeliness unit** (`timeliness_unit`). It works out when the prefetch must
leave the device:

```
pf_time = max(0, next_arrival - e2e_lat)
```

`e2e_lat` is the value the reflector wrote into the device's configuration
space (section 2). The unit behaves as follows:
* Each `pred_new` *arms* the unit.
* While it is armed and `now >= pf_time`, it raises `pf_go`.
* When the backend controller accepts one prefetch (`pf_taken`), the unit
  disarms.

So **one line is released per predicted arrival**. If `pf_time` is already
in the past when the prediction is made, the prefetch goes at once and
`cnt_late` counts it. This happens when the host's access gap is shorter
than the end-to-end latency. The line is then not in the buffer in time for
the next access. It is still useful for a later one, because the address
predictor hands out addresses in order.

**What "on time" means here.** A line released at `pf_time` is read from
the backend and sent up. It lands in the reflector buffer about
`backend latency` cycles later. The host reads it `e2e_lat - backend
latency` cycles after that. In the test setup the backend latency equals
the device latency, so the line waits in the buffer for exactly the switch
part of the latency, `250 × levels` cycles. `tb_switch_levels` measures
this wait: 249, 499, 749 and 999 cycles for 1 to 4 levels.

## 2. Topology discovery and the end-to-end latency

**Switch depth** (`switch_depth_tracker`). Enumeration is presented to the
reflector as a stream of events:
* `ENUM_SWITCH_DOWN` — the walk enters a switch;
* `ENUM_SWITCH_UP` — the walk leaves it;
* `ENUM_ENDPOINT` — a device was found, with its bus number.

A depth counter follows the walk. Each endpoint is entered into a table
(`MAX_DEV = 16` entries) with the current depth and its bus number. A
switch is a PCI-to-PCI bridge with its own bus number, so the depth is the
number of switches between the root complex and the device. When a 17th
device is found, `overflow` is set and the device is dropped.

**End-to-end latency** (`topology_latency_unit`). When `start` is given,
this FSM walks the table. For each device *d* it goes through these
states:

```
S_RD   : config read of the DSLBIS latency register (offset 0x100) of device d
S_WAIT : wait for the completion
S_WR   : e2e[d] = DSLBIS + depth[d] * SWITCH_LAT ;  config write of e2e[d] to offset 0x104
```

Then it moves on to the next device. At the end it pulses `done`. A copy of
every `e2e[d]` stays on the host side (`host_e2e_lat` at the top). At the
defaults, `DSLBIS = 3000` and `SWITCH_LAT = 250`, so a device at depth 2
gets 3500.

**Device configuration space** (`ssd_config_space`). This holds two 32-bit
registers:
* `0x100` — the device's own latency, read only. It stands in for the DSLBIS
  record that a real device returns through its DOE mailbox.
* `0x104` — the end-to-end latency, written by the host.

A read completes one cycle after the request. `e2e_valid` rises on the first
write. Until then the timeliness unit uses 0, which means prefetches are
released at the predicted arrival itself.

## 3. Downward path: the reflector's request side

`reflector_req_path` takes one LLC request at a time:

| LLC request | action |
|---|---|
| `LLC_RD_MISS` | look up the buffer (1 cycle). **Hit**: return the line to the LLC with `from_buffer = 1`, and send a CXL.io hit notification. **Miss**: send M2S RwD `MemRdPC` with the request's tag and line address; payload bits 63:0 = PC, bits 79:64 = pid. |
| `LLC_WR` | send M2S RwD `MemWr` with the line, and invalidate the line in the buffer |
| `LLC_HIT` | send only the CXL.io hit notification |

Read data from the device (S2M MemData) goes to the LLC under its tag. It
has priority over a buffer hit in the same cycle. The buffer hit waits one
cycle.

**Reflector buffer** (`reflector_buffer`). `BUF_BYTES/64` lines: 256 at
16 KB. It is direct mapped on the low bits of the line address, with a tag
and a valid bit per line. A lookup returns in the next cycle and sees the
contents from before any write in the same cycle. The buffer has two write
ports:
* insert, from the BISnpData path;
* invalidate, from host writes and from a standard `BISnpInv`.

If both name the same line in one cycle, the invalidate wins. The
reflector arbitrates between its two invalidate sources, and the request
path goes first.

## 4. Upward path: BISnpData and its payload

`decider_backend_ctrl` serves the device side:
* `MemRdPC` → backend read → S2M `MemData` under the host's tag.
* `MemWr` → backend write.
* `pf_go` plus an address from the predictor (`pa_valid`) → backend read →
  S2M BISnp with opcode `BISnpData` (header: `bi_tag` and line address).
  One or more cycles later an S2M data message follows with opcode `BIData`
  and the same `bi_tag`, carrying the line.

The backend is an in-order request/response port. Up to `OUTST = 4` reads
can be outstanding. A tracking FIFO remembers for each read `{is_prefetch,
tag, address}`. Demand requests have priority over prefetches when both
want the backend.

`bisnp_receiver` on the host side handles one snoop at a time:
1. When it sees `BISnpData`, it waits for the S2M data message with a
   matching `bi_tag`.
2. It writes the line into the buffer.
3. It answers with M2S `BIRsp`.

A standard `BISnpInv` drops the line from the buffer and is also answered
with `BIRsp`. `MemData` passes through to the request path at all times. A
data message with a non-matching tag is not consumed.

Encodings of the new opcodes (4-bit BISnp and RwD opcode fields, 3-bit S2M
data opcode field):

| field | value | name |
|---|---|---|
| M2S RwD opcode | `4'b0001` | MemWr |
| M2S RwD opcode | `4'b1000` | MemRdPC (custom) |
| S2M BISnp opcode | `4'b0010` | BISnpInv |
| S2M BISnp opcode | `4'b1000` | BISnpData (custom) |
| S2M data opcode | `3'b000` | MemData |
| S2M data opcode | `3'b111` | BIData, the payload of BISnpData (custom) |

The custom values are this design's own choice. The paper only says that
they come from the free opcode space.

## 5. Online tuning hooks: hashing and behaviour-change detection

* `pid_pc_hash` folds a 16-bit process id and a 64-bit PC into 16 bits:
  `hash = {pid[10:0], pid[15:11]} ^ pc[15:0] ^ pc[31:16] ^ pc[47:32] ^ pc[63:48]`.
  The hash goes to the address predictor with each address. It also goes
  into the classifier window, so streams from different programs can be
  told apart.
* `behavior_change_detector` keeps a shift register of the last `WIN = 8`
  pairs `{line address, hash}`, newest first. After every `MemRdPC` it
  offers the whole window to the external classifier (`cls_req`), which
  answers with one of 64 categories (`cls_category`, 6 bits). When a
  category differs from the previous one, the detector pulses `change_evt`
  and raises `change_hint`. The hint is handed to the address predictor
  with the next address (`ap_in_change`), then cleared.

## 6. Top-level ports

`expand_top` (all ports are plain signals or packed structs from
`expand_pkg`):

| group | signals | partner |
|---|---|---|
| LLC | `llc_req_valid/ready`, `llc_req` (`op, tag, addr, pc, pid, data`), `llc_rsp_valid`, `llc_rsp` (`tag, from_buffer, data`) | host LLC controller |
| enumeration | `enum_evt_valid`, `enum_evt`, `topo_start`, `topo_done` | host enumeration walk |
| address predictor | out: `ap_in_valid, ap_in_addr, ap_in_hash, ap_in_change`; in: `pa_valid, pa_addr`, out `pa_ready` | ML address predictor |
| classifier | `cls_req`, `cls_window`, `cls_valid`, `cls_category` | decision-tree classifier |
| backend | `be_req_valid/ready/we/addr/data`, `be_rsp_valid/ready/data` | SSD media (DRAM/flash) |
| observation | `e2e_lat, e2e_valid, host_e2e_lat, num_devs, enum_overflow, now, next_arrival, pf_time`, counters `cnt_*` | testbench / debug |

All handshakes are valid/ready: a transfer happens in a cycle where both
are high. A source keeps its payload stable until the transfer. Assertions
in `reflector_req_path` and `decider_backend_ctrl` check this on the CXL
channels. Addresses are 46-bit line addresses: byte address bits 51:6.
Lines are 512 bits.

## 7. Parameters

| parameter | default | from the paper? |
|---|---|---|
| `BUF_BYTES` | 16384 | yes (16 KB reflector buffer) |
| `TP_ENTRIES` | 10 | yes (10 entries, 80 B of 8-byte timestamps) |
| category width | 6 bits | yes (64 categories) |
| `DSLBIS_LAT` | 3000 cycles | derived: 3 µs flash read at 1 GHz |
| `SWITCH_LAT` | 250 cycles | own choice; the paper gives no per-switch latency |
| `MAX_DEV`, `DEPTH_W` | 16, 4 | own choice; the paper evaluates 1–4 switch levels |
| `WIN` | 8 | own choice; the paper does not give the window length |
| `OUTST` | 4 | own choice |

## 8. Where this RTL departs from the paper or fills gaps

* **ML parts are ports.** The transformer address predictor and the
  decision-tree classifier are trained models. Their weights and structure
  are not given, so they are not in the RTL. The testbenches use a stride
  predictor and a simple classifier stand-in.
* **One host, one device.** The top joins one reflector to one decider;
  a pool where several hosts' LLC controllers share devices is not built. The
  reflector's depth and latency tables hold up to 16 devices. But routing
  requests to a pool is not modelled, because the switches are not.
  The enumeration events given to the top must therefore describe exactly
  one endpoint. The latency walk waits for each device's config completion,
  and no device other than the one built in answers; there is no completion
  timeout.
* **No link or switch delay on the wires.** The CXL channels are direct
  valid/ready connections. Switch latency only enters through the
  end-to-end latency value. So in simulation a line lands earlier than it
  would in a real system, by the real switch time.
* **DOE is reduced to one register.** The device latency is a read-only
  config register, not a DOE mailbox exchange with a CDAT/DSLBIS record.
* **VH latency is depth × constant.** The paper says the reflector computes
  the switch latency but not how; a fixed cost per level is used.
* **Prefetch rate.** One line per predicted arrival. The paper does not say
  how many lines go per prediction.
* **Coherence details.** These are this design's own:
  * `BIRsp` after each `BISnpData`;
  * `BISnpInv` handling;
  * buffer invalidation on host writes.
* **No write completions.** S2M NDR (write completions) are not generated.
* **Buffer hits keep the line.** A line served to the LLC from the buffer
  stays there until it is replaced, invalidated by a host write or snooped
  out. The paper does not say whether a hit frees the entry.
* **One request at a time** in the reflector request path. It is simple
  and not a throughput design.

## 9. Verification and how to simulate

Each block has a self-checking testbench in `tb/`. Each testbench:
* prints `TB_RESULT checks=<n> failures=<m>`;
* has a watchdog;
* compares results with values it works out itself.

`tb/backend_media_model.sv` is a behavioural in-order media model with a
fixed latency `LAT`. A read returns what was last written to the line, or
otherwise the pattern `({18'h2A5A5, addr} + i)` in 64-bit word `i`, so
every line's contents are known to the checker.

System-level tests, at the top's default parameters:

* `tb_expand_top`. Enumeration puts the device behind 2 switches, which
  gives an e2e of 3500 cycles. Then it runs four phases:
  * stride-1 reads every 5000 cycles;
  * a change to stride 5, which must be detected as a behaviour change;
  * a write-back followed by a read, which must not be served stale from
    the buffer;
  * reads every 800 cycles, shorter than the e2e, which must produce late
    prefetches.

  It checks the read data against the media model, the prefetch times, and
  that every mechanism happened. In one run:
  * 59 buffer hits;
  * 20 `MemRdPC`;
  * 91 BISnpData fills, each answered by a `BIRsp`;
  * 20 late prefetches;
  * 19 behaviour changes.
* `tb_switch_levels`. It re-enumerates with the device at depth 1, 2, 3
  and 4. At every level it checks:
  * the e2e value, `3000 + 250·level`;
  * the prefetch time;
  * that 30 of 32 stride reads are served from the buffer;
  * the minimum buffer wait of `250·level` cycles.
* `tb_timeliness_jitter`. The device sits at depth 2. Reads arrive with
  gaps of `5000 ± J` cycles, drawn uniformly. It shows how sensitive the
  timing prediction is to irregular arrivals. A line waits about 500 cycles
  in the buffer (the switch part of the e2e). So while `J` stays below that
  margin, every read is served from the buffer:

  | J (cycles) | 0 | 250 | 450 | 1500 | 2500 |
  |---|---|---|---|---|---|
  | reads served from the buffer | 100% | 100% | 100% | 65% | 55% |

  The test checks that all data is correct, that the share is at least 90%
  for `J ≤ 450`, and that it falls as `J` grows. A read that arrives early
  misses the buffer and is served by the device instead. The prefetch for
  that line comes too late to help.

Run any testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
    -y rtl -y tb rtl/expand_pkg.sv tb/tb_expand_top.sv \
    --top-module tb_expand_top -Mdir obj_tb_expand_top -o sim
./obj_tb_expand_top/sim
```

To run another test, replace `tb_expand_top` with its name. The package
file is given explicitly. Everything else is found through `-y`.
`tb_expand_top` takes a few seconds. The block tests take well under a
second.

**How far to trust it.**
* Tested:
  * protocol sequencing;
  * the arithmetic of the timing chain;
  * the buffer's coherence under host writes;
  * that prefetches land `switch latency` ahead of use.
* Not tested:
  * real ML predictors, so prefetch accuracy is only as good as the stride
    stand-in;
  * a multi-device pool;
  * back-pressure from a real link;
  * timing closure. The design is synthesizable, but the 64-bit divide in
    the timing predictor is combinational and would need pipelining at high
    clock rates.
