# A reuse cache as the shared last-level cache of a CPU-GPU chip

In a chip where CPU cores and a GPU share one last-level cache (LLC), most
lines that the LLC fills are never read again before they are replaced. GPU
kernels make this worse. They stream through large arrays, issue many more
memory requests than the CPU, and so push out CPU lines that would have been
reused.

A *reuse cache* stores a line's data only once the line has shown reuse. It
has two separate arrays:

* a **tag array** that remembers which lines were seen recently;
* a smaller **data array** that holds only lines that were referenced a
  second time while their tag was still present.

A line read once, such as a GPU streaming line, costs one tag entry and no
data space. Because the data array only needs to hold reused lines, it can be
half the size of a conventional LLC's, which saves most of the area.

This repository holds synthesizable SystemVerilog for such an LLC. It is built
at 16384 tags and 8192 data lines of 64 bytes: as many tags as a 1 MB 16-way
cache has, and half as much data (512 KB). Two ports serve the CPU's and the
GPU's private L2 caches, and one port goes to DRAM. The design follows a
published evaluation of the reuse cache for heterogeneous CPU-GPU systems.
That work studied the policy in a simulator and describes the mechanism, not
a circuit. The circuit-level choices below (timing, interfaces, write
handling, reset) are this design's own, and each is marked as such.

## The two pointers

Tag and data are decoupled, so their association is explicit:

| array | entry fields | size at default |
|---|---|---|
| tag (`reuse_tag_array`) | valid, tag (15 b), forward-pointer-valid `dpv`, forward pointer `dptr` (13 b) | 1024 sets x 16 ways |
| data (`reuse_data_array`) | valid, dirty, reverse pointer `tptr` (14 b), line (512 b) | 512 sets x 16 ways |

* The **forward pointer** of a tag entry names the data entry that holds its
  line, as a flat index `{data set, data way}`. `dpv = 0` is the NULL
  pointer: the line is known but its data is not stored (a "tag-only" line).
* The **reverse pointer** of a data entry names its owner tag entry,
  `{tag set, tag way}`. It exists so that replacing a data entry can find
  the tag whose pointer must become NULL.

The controller keeps one invariant at all times: a tag has `dpv = 1` and
`dptr = d` exactly when data entry `d` is valid and its `tptr` points back at
that tag. The controller's assertions check both directions whenever it
follows a pointer.

Addresses are 31-bit byte addresses (2 GB of memory), so requests carry a
25-bit line address. The tag set is the low 10 bits of the line address, and
the tag is the upper 15. The data set is the low 9 bits of the line address.
This is one of this design's choices: the data array could be organised in
other ways, since the forward pointer holds a full index. Both arrays replace
in LRU order within a set. An invalid way is always used first.

## What happens to a request

`reuse_llc` serves one request at a time. It first reads the tag set, then
classifies the request:

| tag look-up result | read request | write-back from an L2 |
|---|---|---|
| tag hit, pointer set | **data hit**: read the line from the data array | **write hit**: overwrite the line, mark it dirty |
| tag hit, pointer NULL | **reuse detected**: read DRAM, send the line to the L2, then insert it into the data array and set the pointer | **write-around**: send to DRAM |
| tag miss | **first reference**: insert the tag with a NULL pointer, read DRAM, send the line to the L2; nothing is stored | **write-around**: send to DRAM |

The read column is the reuse cache's policy. The write column is this
design's choice, because the policy is only described for reads. Writes never
allocate anything. They also leave the tag array unchanged, including its LRU
order.

### Two kinds of eviction

Tags and data are replaced independently:

* **Tag eviction.** A first reference needs a tag way. If the victim tag's
  pointer is set, its data entry is removed too (`tag_evict_data`).
  Otherwise only the tag goes.
* **Data eviction.** Reuse detection needs a data way in the line's data set.
  If the victim data entry is valid, the controller follows its reverse
  pointer, reads the owner's tag set, and rewrites that tag with a NULL
  pointer (`data_evict`). The owner tag stays in the tag array, so the line
  becomes tag-only again. One more miss on it re-inserts the data.

In both cases a dirty line is first written to DRAM (`dirty_writeback`).
The paper does not mention dirty data, so this write-back is this design's
choice.

## Controller sequence and timing

Every array read is synchronous: the address goes in during one cycle, and
the data comes out in the next. Each state of the controller FSM therefore
consumes what the previous state read:

```
IDLE ─req─> TLOOK ─┬─ hit ───────────────> DHIT ──────────────────────────> IDLE
                   ├─ write, no data ────> WAROUND ─DRAM ready────────────> IDLE
                   ├─ tag miss ─┬─────────────────────> MISS_RD -> MISS_WAIT -> IDLE
                   │            └─ victim has data ─> TEV_RD [-> TEV_WB] -> MISS_RD
                   └─ tag-only hit ─> REUSE_RD -> REUSE_WAIT ─> DSEL ─┬──────────────> DINS -> IDLE
                                                                      └─> DEV [-> DEV_WB] -> DINS
```

* **Data hit.** `rsp_valid_o` is high in the second cycle after the request
  is accepted: one cycle reads the tag set, the next reads the line.
* **Misses.** The response leaves in the cycle the DRAM data arrives.
  For a reuse hit, the data-array insertion (DSEL, DEV, DINS: 3 to 4 cycles
  plus any write-back) happens after the response. The next request waits
  for it.
* **Reset.** After reset both arrays clear their valid bits and load their
  LRU ages, one set per cycle. This takes `TAG_SETS` cycles (1024), and no
  request is accepted before it ends.

The paper's description looks the tag up after the DRAM data returns. This
design looks it up first, which gives the same result. A single outstanding
request, rather than a pipelined or multi-miss controller, is this design's
simplification.

## Sharing between CPU and GPU

`llc_arbiter` joins the CPU L2 port and the GPU L2 port into the single
controller port:

* When both ports wait, the one that did not win last time goes first.
* It stamps each request with its source (`SRC_CPU` or `SRC_GPU`).
* It returns each response to the port named in the response.

The reuse policy itself treats both sources the same. The point is that GPU
streaming lines almost never get a second reference in time, so they never
occupy data space. The `src` field of `events_o` lets a system count
mechanisms per source, for example GPU misses per kilo-instruction.

## Files

| file | contents |
|---|---|
| `rtl/reuse_llc_pkg.sv` | widths (address, line), request/response/DRAM structs, `llc_events_t` |
| `rtl/lru_update.sv` | true-LRU ages for one set: touch update and victim choice |
| `rtl/reuse_tag_array.sv` | tag entries with forward pointers, per-set LRU, reset sweep |
| `rtl/reuse_data_array.sv` | line store with valid, dirty and reverse pointer, per-set LRU, reset sweep |
| `rtl/reuse_llc.sv` | the controller FSM, with both arrays inside |
| `rtl/llc_arbiter.sv` | CPU/GPU round-robin arbiter and response routing |
| `rtl/reuse_llc_top.sv` | top: arbiter + controller; L2, DRAM and event ports |
| `tb/reuse_ref_pkg.sv` | reference model of the policy (used by the testbenches) and the initial DRAM contents |
| `tb/dram_model.sv` | behavioural DRAM: fixed latency, in-order reads, posted writes, random back-pressure |
| `tb/tb_*.sv` | self-checking testbenches, one per module plus workload and end-to-end tests |

### Top-level ports (`reuse_llc_top`)

| port | dir | type | meaning |
|---|---|---|---|
| `cpu_req_valid_i`, `cpu_req_ready_o`, `cpu_req_i` | in, out, in | `llc_req_t` | CPU L2 request: `addr` (line), `write`, `wdata`; a request is taken when valid and ready are both high, and must be held until then |
| `gpu_req_valid_i`, `gpu_req_ready_o`, `gpu_req_i` | in, out, in | `llc_req_t` | the same for the GPU L2 |
| `cpu_rsp_valid_o`, `gpu_rsp_valid_o`, `rsp_o` | out | `llc_rsp_t` | one-cycle response pulse, with read data or a write acknowledgement (`write = 1`); the L2 cannot stall it |
| `mem_req_valid_o`, `mem_req_ready_i`, `mem_req_o` | out, in, out | `mem_req_t` | DRAM read or posted write of one line |
| `mem_rsp_valid_i`, `mem_rsp_data_i` | in | `line_t` | DRAM read data, in request order |
| `events_o` | out | `llc_events_t` | pulses: `data_hit`, `tag_insert`, `data_insert`, `tag_evict`, `tag_evict_data`, `data_evict`, `dirty_writeback`, `write_hit`, `write_around`, plus `src` |

`clk` is the single clock. `rst_n` is an asynchronous, active-low reset.

## Sizes and how to change them

The parameters of `reuse_llc_top` and `reuse_llc` are `TAG_SETS`
(default 1024), `TAG_WAYS` (16), `DATA_SETS` (512) and `DATA_WAYS` (16). Each
must be a power of two, at least 2. The tag and pointer widths follow from
them. Two configurations from the evaluation:

* 16384 tags and 8192 data lines: the default, the 2:1 tag-to-data ratio
  that the evaluation recommends as a starting point;
* 32768 tags and 8192 data lines: `TAG_SETS = 2048`.

A conventional 1 MB LLC has as many tags as the default build but twice the
data. The evaluation reports 2.43 mm² for that cache at 32 nm. It reports
1.33 mm² for the 1 MB-tag reuse cache and 1.55 mm² for the 2 MB-tag one,
pointers included. Those area figures are the evaluation's, not measurements
of this RTL.

The memories are plain arrays: `entries`/`ages` in the tag array, and
`meta`/`ages`/`lines` in the data array. Each has one synchronous read port
and one write port, so a memory compiler's SRAMs can replace them. The line
store is 4 Mbit.

## Verification

Each testbench checks its module against values computed on its own, prints
`TB_RESULT checks=N failures=M`, and has a watchdog:

| testbench | what it checks |
|---|---|
| `tb_lru_update` | 5000 random touches at 16 ways against a recency-ordered list |
| `tb_reuse_tag_array` | reset sweep length; random writes, reads and touches against a model (entries, ages, victim) at 8 x 4 |
| `tb_reuse_data_array` | the same for the data array, including metadata-only writes keeping the line |
| `tb_reuse_llc` | 4000 random reads and write-backs on a tiny cache (4 x 2 tags, 2 x 2 data), so every eviction kind is frequent; each request's set of mechanisms must match `reuse_ref_pkg`, every read must return the latest data, and a hit must answer in the second cycle |
| `tb_llc_arbiter` | grant alternation under contention, source stamping, ready and response routing |
| `tb_reuse_llc_top` | end to end at the **default size**, with CPU and GPU streams running together; mechanisms predicted per request, data checked, and each mechanism (including arbiter contention and DRAM back-pressure) must occur |
| `tb_workload_suite` | the five CPU/GPU benchmark pairings of the evaluation (Queens-FloydWarshall, BFS-Convolution, MatMul-RecursiveGaussian, SHA-Histogram, MatMul-NBody) as synthetic streams of each benchmark's class, at the default size; every request checked against the reference model, and reads, hits and data insertions printed per side |
| `tb_workload_mixes` | a cache-friendly CPU loop against a streaming GPU, on both tag sizes: streaming lines never get data, each hot line is inserted once, and every later read hits |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wall -Wno-fatal --top-module tb_reuse_llc_top \
  -y rtl -y tb +libext+.sv rtl/reuse_llc_pkg.sv tb/reuse_ref_pkg.sv tb/tb_reuse_llc_top.sv
./obj_dir/Vtb_reuse_llc_top
```

Each testbench runs in a few seconds. The only testbenches that change
parameters are the per-module tests, which shrink the module so that
evictions happen often, and `tb_workload_mixes`, which sets `TAG_SETS` for
its second configuration.

`tb_workload_suite` prints reads, hits and data insertions per side, which
shows the policy at work:

* With a 300-line CPU hot set, 7400 of 8000 CPU reads hit.
* Next to that CPU, a streaming GPU gets no hits and no data insertions.
* The GPU's reused lines, swept every 3000 requests, hit once they have been
  seen twice.

The streams are stand-ins for each benchmark class, not traces of the
benchmarks, so these numbers say nothing about the real programs.

Lint leaves two kinds of warning in place. `rd_ages_o` of both arrays is left
open in the controller, because it only exists for observation and testing.
`rst_n` is reported as both synchronous and asynchronous, because the
assertions use it in `disable iff`.

## Where this departs from, or goes beyond, the published design

Taken from the published description:

* the decoupled tag and data arrays, forward and reverse pointers;
* insertion of the tag only on a first miss, and of the data on a miss to a
  tag-only line;
* removal of data together with its tag;
* a data eviction that makes the owner tag's pointer NULL;
* 16 ways, 64-byte lines, LRU, 2 GB of memory, 1 MB-worth of tags and 512 KB
  of data.

This design's own choices:

* the data array's set-associative organisation indexed by address bits;
* write-back handling: write hits mark the line dirty; all other writes go
  around to DRAM;
* dirty write-back on either eviction;
* the blocking, one-request-at-a-time controller and its cycle timing;
* valid bits and the reset sweep;
* the request/response/DRAM interfaces and the round-robin arbiter;
* the event outputs.

Not built:

* the CPU cores and the GPU compute units;
* their L1 and L2 caches, which connect at the L2 ports;
* DRAM, which connects at the DRAM port;
* the two policies the evaluation compares against (a statically split LLC
  and bypassing the LLC for GPU requests);
* ideas the evaluation leaves for later: a "tag-only" coherence state,
  more reuse hysteresis, and combination with compression.

There is no coherence protocol in this LLC.
