# CXL-SSD with Determinism and Bufferability hints

A PCIe SSD normally reaches the host as a block device. If you map its
internal buffer into a PCIe BAR, the host can load and store to it, but
those accesses cannot be cached. A CXL Type 3 endpoint is different: its
memory (HDM, host-managed device memory) sits in the host's *cacheable*
address space, so most loads and stores hit in the CPU caches and never
reach the device. This RTL implements such a flash-backed CXL memory
expander (a "CXL-SSD"), following the design in *From Block to Byte:
Transforming PCIe SSDs with CXL Memory Protocol and Instruction Annotation*
(Kwon et al.). It covers the host root port, the device's CXL controller and
an SSD controller that serves CXL.mem reads and writes in hardware.

Some requests still miss in the CPU caches and reach the flash. For those,
the design's main idea is two one-bit hints that the host attaches to each
request. They ride in the reserved bits of the CXL.mem messages, so they add
no transfer cost.

* **Bufferability: BF or NB.** BF lets the SSD keep the data in its internal
  DRAM. NB means the request must reach the flash before it completes, so an
  NB store is persistent when the host sees its completion.
* **Determinism: DT or ND.** DT asks the SSD to serve the request without
  interference from internal tasks such as garbage collection. ND lets those
  tasks go on, and the request may wait for them.

The rest of this document explains what the hints do in hardware, how a
request travels through the blocks, and what was assumed where the paper is
silent.

## The hints in the message

The annotation is a 2-bit `annot_t {dt, nb}`. It sits in the 10-bit reserved
field of the M2S request and comes back in the S2M no-data response
(`cxl_ssd_pkg`):

| reserved bit | meaning when 1 | meaning when 0 |
|---|---|---|
| 0 (`RSVD_NB_BIT`) | NB: non-bufferable | BF: bufferable |
| 1 (`RSVD_DT_BIT`) | DT: deterministic | ND: non-deterministic |
| 9..2 | unused, sent as 0 | |

The polarity makes an all-zero field mean BF+ND. That is what a host without
hint support sends, so such a host gets ordinary buffered behaviour.

### Where the hints come from (`annot_gen`)

* **DT.** Each cycle the CPU's instruction window (instruction queue or
  reorder buffer, `WINDOW` entries) reports which entries are valid and which
  are loads. When loads make up more than `THRESH_PCT` percent of the valid
  entries, the CPU is about to stall on memory, and `dt_mode` goes high. The
  comparison `loads*100 > THRESH_PCT*valid` needs no divider. Software can
  also ask for DT on a single request (`req_sw_dt`), for example on a
  transaction commit.
* **NB.** Only requests from the dedicated persistent-store instruction
  (`req_persist`) are NB. Every other request is BF.

### What the SSD does with them (`ssd_ctrl`, `task_sched`)

| request | BF | NB |
|---|---|---|
| read, line in DRAM | served from DRAM | served from DRAM |
| read, line not in DRAM | write back a dirty victim, read flash, fill DRAM | read flash, DRAM untouched ("bypass") |
| write | write back a dirty victim if needed, write DRAM, line dirty | program flash directly, drop any cached copy, complete after the program |

| | DT | ND |
|---|---|---|
| internal task running | held (`erase_suspend`) while the request waits or is served, then resumes | keeps running; the request waits if it needs the flash |
| task queued | does not start while a DT request is present | may start (idle time or ND traffic) |

A typical key-value transaction maps onto these cases:

* BeginTransaction and Put are BF+ND stores. They land in DRAM in about 30
  cycles, and any garbage collection in progress keeps running.
* Commit is an NB+DT store. It bypasses the DRAM, suspends the erase, and
  completes once the line is programmed (about tPROG).
* A later GPF writes back the buffered lines.

The end-to-end testbench runs exactly this sequence.

### Global persistent flush

A GPF request from the host becomes a configuration write to the endpoint's
GPF register. `cxl_ep_ctrl` raises `gpf_busy` and starts `ssd_ctrl`. When the
controller is idle, it scans every DRAM line, writes each dirty one to flash,
and then reports done. New commands are held back while the flush runs.

## Path of a request

```
 host CPU ── annot_gen ──┐
  (window, ld/st)        v
                      cxl_rp  ──M2S req (+hint)──>  cxl_ep_ctrl ──I/O cmd──> ssd_ctrl ──> dram_buffer
                         ^    <──S2M NDR / DRS───        │    <──completion──    │  └──> task_sched
                         │                               │                       v
                  HDM window, GPF ──config writes──> HDM base/size, GPF     flash back end (ports)
```

1. **Mapping.** The endpoint reports the size of its HDM in a read-only
   capability register (`hdm_cap`, 2^35 bytes). At enumeration, host
   software chooses where the window starts and writes that base into
   `cxl_rp`. The window's size is the one the device reported. The root port
   then writes base and size into the endpoint's configuration registers.
   From then on, the endpoint turns a host address into a device address by
   subtracting the base.
2. **Request.** `cxl_rp` accepts a host request that falls inside the window.
   It gives the request a free slot of its outstanding table (the slot index
   is the CXL tag) and sends it as one M2S request. A write's 64-byte payload
   travels beside it. A request outside the window gets an error response.
3. **Parse.** `cxl_ep_ctrl` registers the request and hands an I/O command to
   the SSD controller. The command carries read/write, the device line
   address, the hint and the tag.
4. **Serve.** `ssd_ctrl` checks its tag store and takes one of the paths in
   the tables above.
5. **Respond.** The completion goes back as an S2M DRS (read data) or an NDR
   (write done, hint echoed). `cxl_rp` matches the tag and returns the host's
   request id. Responses may come back out of order.

### Timing (default parameters, 1 GHz clock assumed)

| event | cycles |
|---|---|
| host request to host response, read hit in SSD DRAM | `DRAM_LAT + 6` = 25 |
| command accepted to completion inside `ssd_ctrl`, DRAM hit | `DRAM_LAT + 3` = 22 |
| BF write, clean victim | about 25 |
| read miss | + tR of the flash (3 us = 3,000 cycles for Z-NAND) |
| NB write | + tPROG (100 us = 100,000 cycles) |
| ND request behind a running erase | + the rest of tBERS (up to 1 ms) |
| DT request behind a running erase | no erase wait: the erase is suspended at once |

## Blocks and files

| file | block |
|---|---|
| `rtl/cxl_ssd_pkg.sv` | shared types: line, addresses, `annot_t`, M2S/S2M messages, I/O commands, configuration messages |
| `rtl/annot_gen.sv` | DT threshold rule and NB flag (host side) |
| `rtl/cxl_rp.sv` | root port: HDM window, mapping sync, GPF forwarding, tag table, M2S/S2M |
| `rtl/cxl_ep_ctrl.sv` | endpoint CXL controller: configuration registers, request parsing, response formatting |
| `rtl/ssd_ctrl.sv` | SSD controller: DRAM cache (direct-mapped, write-back), BF/NB paths, GPF flush |
| `rtl/task_sched.sv` | internal-task scheduler: start, suspend, resume under DT/ND |
| `rtl/dram_buffer.sv` | SSD internal DRAM as an array with fixed latency |
| `rtl/cxl_mem_if.sv` | the CXL.mem link between root port and endpoint as one interface, with handshake assertions |
| `rtl/cxl_ssd_system.sv` | top: everything above, wired together |
| `tb/znand_model.sv` | behavioural flash media (tR, tPROG, tBERS, erase suspend), simulation only |
| `tb/tb_*.sv` | one self-checking testbench per block, plus the end-to-end `tb_cxl_ssd_system` and the workload tests `tb_wl_*` |

Reset is synchronous and active low throughout. All handshakes are
valid/ready. Concurrent assertions check that responses carry known tags and
that held outputs stay stable.

## Parameters

| parameter | default | origin |
|---|---|---|
| line size | 64 B | paper (64 B requests, the LLC line size) |
| reserved field | 10 bits | paper |
| device capacity | 2^35 B (32 GB storage node) | paper |
| `DRAM_LAT` | 19 cycles | paper's SSD DRAM tRP = tRCD = 9.1 ns, summed and rounded up at an assumed 1 GHz |
| flash timing (testbench model) | tR 3 us, tPROG 100 us, tBERS 1 ms | paper (Z-NAND) |
| `WINDOW` | 64 | assumed (the paper gives only a 64-entry LSQ) |
| `THRESH_PCT` | 50 | assumed (the paper only says "a certain threshold") |
| `CACHE_LINES` | 1024 (64 KB) | assumed (no DRAM size given) |
| `MAX_OUTSTANDING` | 16 | assumed |

## Where this RTL goes beyond the paper or departs from it

The paper states what the hints mean and which blocks act on them. It does
not describe the inside of any block, so the following are choices made
here:

* **Hint encoding.** The bit positions and polarity in the reserved field are
  this design's own. The paper only says the hints use the 10-bit reserved
  field.
* **Message names.** The paper swaps the CXL names "Req" and "RwD". This RTL
  uses one M2S request channel for reads and writes, with the write payload
  beside it, so stores carry the hint as the paper intends.
* **Where the hints are made.** The paper says once that the root port
  generates the hints as loads and stores arrive, and elsewhere that the CPU
  decides DT from its instruction queue and issues a special NB store. Here
  the decision uses CPU state that comes in as ports (window contents,
  store type, software DT). `annot_gen` sits on the host side right in
  front of `cxl_rp`, which writes the hint into the message.
* **Unannotated requests.** The paper's NB mechanism is a dedicated store
  instruction, so all other requests are BF. One sentence about varying "the
  proportion of functions annotated as bufferable" suggests the opposite
  default; this RTL follows the mechanism.
* **DT semantics.** The paper says DT "halts" internal tasks and that they
  "resume" once DT hints stop. Here a DT request suspends the running erase
  for exactly as long as it is waiting or in service.
* **Internal tasks.** What starts garbage collection is not described, so a
  firmware input queues tasks. One task is one block erase, with victim
  blocks taken round robin. Page relocation is not modelled.
* **BF loads.** The paper says BF lets the device "prefetch" into DRAM. Here
  that means filling the missed line; neighbouring lines are not fetched.
* **SSD controller.** It serves one command at a time. It is a direct-mapped
  write-back cache, and an NB write drops the cached copy.
* **DRAM.** The internal DRAM is an on-chip array with a fixed delay, not a
  DRAM controller with an external device.
* **Not modelled.** FlexBus, the link layer and the PHY are not modelled;
  root port and endpoint exchange packed structs directly, bundled in the
  `cxl_mem_if` interface. CXL.io is reduced to the HDM size the host reads
  and the configuration writes it carries.
* **Not part of this RTL.** The host CPU, the SSD firmware and the flash
  media. The CXL switch, fabric manager and multi-logical-device options
  that the paper discusses for disaggregation are also left out.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
through a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_cxl_ssd_system rtl/cxl_ssd_pkg.sv tb/tb_cxl_ssd_system.sv
./obj_dir/Vtb_cxl_ssd_system
```

Replace the top module with `tb_annot_gen`, `tb_cxl_rp`, `tb_cxl_ep_ctrl`,
`tb_ssd_ctrl`, `tb_task_sched` or `tb_dram_buffer` for the block tests.

`tb_cxl_ssd_system` uses every default parameter and the real Z-NAND
timings. It simulates about 2.3 million cycles in a few seconds. It counts
each mechanism and fails if one of them never happened:

* BF buffering
* DRAM hit with an exact 25-cycle round trip
* NB bypass with persistence at completion
* DT suspending an erase, through the load threshold and through software
* ND waiting behind an erase
* GPF flush
* HDM window refusal

Three more testbenches run workload-shaped traffic through the whole design,
also at default parameters and Z-NAND timings:

* `tb_wl_apexmap`: an Apex-Map locality sweep. Loads go to line
  `floor(M * r^(1/alpha))` for alpha = 1, 0.25, 0.05 and 0.001. The test
  predicts every DRAM hit from its own copy of the tags and checks the
  controller's count. It also checks that the hit ratio rises and the mean
  latency falls as alpha falls. In one run, the hit ratio went from about
  0.01 to 0.99, and the mean load latency from about 3,000 cycles to 55.
* `tb_wl_stream`: the STREAM kernels copy, scale, add and triad, with BF+DT
  hints. Erases are queued all the time. The test checks every result line,
  and checks that no request waited behind an erase.
* `tb_wl_phases`: three phases. First a load-heavy phase, which is DT by
  the threshold rule. Then a mixed phase and a store-heavy phase, both ND.
  Erases are queued during the run. In the first phase no request may wait
  behind an erase. In the last, at least one must: the millisecond tail
  comes back once DT stops.

The array sizes in these tests are small and chosen here. The point is the
behaviour of the hints, not throughput.

`tb_ssd_ctrl` shrinks the cache to 16 lines and the flash times so that
conflicts and write-backs are frequent. It checks every read against a
reference memory.

## Fit of the evaluated workloads

The 18 SPEC CPU / RV8 workloads have footprints of 0.2 to 96 GB. Three of
them do not fit in one device's 2^35-byte window: milc (34.9 GB), bzip2
(96 GB) and lbm (42.2 GB). bwaves (34.3 GB) fits only if "GB" means 10^9
bytes. The 64 KB DRAM cache is far smaller than any footprint; that affects
speed, not correctness. The Apex-Map and STREAM footprints are not given.
This RTL serves one request at a time inside the SSD, so it says nothing
about multi-thread bandwidth.
