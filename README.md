# Thread batching for GPU memory: SM-bound banks and batch-aware warp scheduling

A GPU runs thousands of threads whose memory requests all end up in a few DRAM
channels. When the thread blocks of one kernel are spread over the streaming
multiprocessors (SMs) in an interleaved way, every SM touches every bank, the
request streams of different SMs collide in the same banks, and both bank-level
parallelism and row-buffer locality suffer.

This design attacks that in three places:

1. **Serial thread block dispatch.** Each SM gets a *contiguous* range of thread
   block ids from its own dispatch queue instead of taking the next id from a
   global dispatcher. Consecutive thread blocks usually share pages, so a group
   of `stride` consecutive blocks (a *thread batch*) runs on one SM.
2. **Page coloring.** The physical address map puts the bank and channel bits in
   the page frame number, so the operating system can place every page used by
   a batch in banks that belong to the batch's SM. Requests of different SMs then
   go to different banks.
3. **Thread batch-aware scheduling (TBAS).** Inside an SM, the warp scheduler runs
   one thread batch at a time. When the running batch runs out of ready warps it
   is demoted as a whole and the *oldest* resident batch with ready warps is
   promoted. Warps of one batch hit the same DRAM rows, and oldest-first
   promotion keeps the SM from bursting requests for many rows at once.

On the memory side every channel has an open-page FR-FCFS controller (row hits
first, then oldest) that always serves CPU requests ahead of GPU requests, so a
CPU sharing the memory is not starved by the GPU.

The RTL covers the parts of this scheme that are hardware: the per-SM dispatch
queue, block/warp slot management, the TBAS scheduler and its promotion arbiter,
the page-coloring address decoder and the channel controllers. The SM execution
pipeline, caches, TLBs, the on-chip network, CPU cores, DRAM devices and the
operating system's page allocator are outside; their signals are ports of the
top module.

## Block diagram

```
                     host: per-SM [head, tail), stride, warps per block
                                        |
  +-------------------------- sm_frontend (x8) -------------------------+
  |  dispatch_queue --tb id, batch ordinal--> block_launcher             |
  |   head/tail regs                        8 block slots, 48 warp slots |
  |                                                |  tables             |
  |                                          tbas_scheduler              |
  |                                  running batch, batch_priority_arbiter|
  +-----------------------------------|---------------------------------+
          issue (warp, tb id)         v      ^ issue_stall / wake / exit
                          [ SM pipeline, L1, TLB: outside ]
                                      | physical address
                              page_color_mapper (x8)
                        channel, bank, row, col, local/remote
                                      |
                         [ interconnect: outside ]
                                      v
        frfcfs_mc (GDDR5 ch0)   frfcfs_mc (GDDR5 ch1)   frfcfs_mc (DDR3, CPU)
          64-entry queue, 16 banks                         8 banks
                                      |
                          [ DRAM devices: outside ]
```

## Serial dispatch and implicit thread batches

`dispatch_queue` holds no list. Two registers, `head` and `tail`, describe the
range of thread block ids given to the SM before the kernel starts; `tail` is
one past the last id. A pop hands out `head` and increments it; the queue is
empty when the two meet. Splitting the grid into balanced ranges is done by the
host (the split is known when the kernel is compiled).

The *thread block stride* is the number of consecutive blocks that make up a
thread batch; it is found by profiling the kernel and loaded with the range. The
queue counts pops modulo the stride and gives each block a *batch ordinal*
(0, 0, 1, 1, 2, ... for stride 2). The ordinal is the batch's identity inside
the SM and also its age: smaller means dispatched earlier. This assumes each
SM's range starts on a batch boundary, which the host has to respect.

`block_launcher` keeps 8 block slots and 48 warp slots (1536 threads of 32-thread
warps). When a block slot is idle, the queue is not empty and enough warp slots
are free for a whole block, it pops the next id. The SM never waits for a global
dispatcher. It then fills the block's warps, one per cycle, into the lowest free
warp slots, recording for each warp its block slot and its index in the block.
A block slot is released when the last of its warps exits.

## TBAS: one thread batch in the running set

This is the part that most differs from a conventional warp scheduler.

* Every warp is either *ready* or waiting. A warp becomes ready when it is
  allocated. It stops being ready when it issues a long-latency instruction; the
  pipeline says so with `issue_stall` in the issue cycle. It becomes ready again
  on `wake`, and it leaves on `exit`.
* The *running set* is every ready warp of one batch, the running batch. Each
  cycle the scheduler issues one of them, round-robin after the last issued warp.
* When the running batch has fewer than `MIN_ACTIVE` ready warps (default 1),
  the scheduler demotes it. In the same cycle `batch_priority_arbiter` chooses,
  among all resident block slots whose batch has at least `MIN_ACTIVE` ready
  warps, the one with the smallest batch ordinal. That batch becomes the running
  batch from the next cycle. The switch cycle issues nothing. The demoted batch
  can be promoted again later if it is still the oldest with ready warps.
* With no batch eligible, the running set is empty until a warp wakes.

An example with four single-block batches A, B, C, D (ordinals 0 to 3), two
warps each, every warp doing compute, load, compute, exit, and every load
answered 6 cycles after issue. The trace below is what `tb_tbas_worked_example`
produces; cycle 1 is the first promotion:

```
cycle  run  issue            note
  1     -   -                promote A (oldest with ready warps)
  2-3   A   A.w0, A.w1 comp
  4-5   A   A.w0, A.w1 load  both of A's warps now wait
  6     A   -                demote A, promote B
  7-10  B   B comp, B loads  A's data returns at cycles 10 and 11
 11     B   -                demote B, promote A: A is older than C and D
 12-15  A   A comp, A exits
 16     A   -                demote A, promote B (its data is back)
 17-20  B   B comp, B exits
 21     B   -                demote B, promote C
 22-25  C   C comp, C loads
 26     C   -                demote C, promote D
 27-30  D   D comp, D loads
 31     D   -                demote D, promote C; then D again; then idle
```

The running batch goes A, B, A, B, C, D, C, D. All loads to the row that holds A
and B are issued before any load to the row of C and D, so the bank changes
row once.

A plain round-robin or greedy scheduler would mix A to D and send loads for four
different rows into one bank at once. TBAS keeps the requests of one batch
together, so they arrive at the bank while its row is open. Favouring older
batches brings a batch whose data has just come back to the front.

Because ordinals only grow within a kernel, "oldest" is an unsigned compare of
16-bit ordinals. The arbiter is a linear minimum search over 8 block slots.

## Page-coloring address map

`page_color_mapper` splits a 32-bit physical address as

| bits   | 31..17 | 16..13 | 12      | 11..3  | 2..0        |
|--------|--------|--------|---------|--------|-------------|
| field  | row    | bank   | channel | column | byte offset |

The field order is the page-coloring map of the scheme. The widths are this
design's choice. Column and byte offset together are exactly the 4 KB page
offset. That is the condition for the OS to choose any bank and channel for a
page just by choosing its frame. The 5 bits `{bank, channel}` are the page
*color*: one of the 32 banks of the two GDDR5 channels. The colors are divided
among the 8 SMs in contiguous groups of 4 (SM *s* owns colors 4s to 4s+3). The
mapper reports the owner (`home_sm`) and whether the requesting SM is that owner
(`local_access`). A local-access ratio near 1 shows that the page placement
works.

A consequence of this field order is that one row of one bank holds exactly one
4 KB page. Pages of neighbouring batches share rows only if the OS gives them the
same color.

## Channel controller

`frfcfs_mc` keeps up to 64 requests in a collapsing queue in arrival order. Each
cycle it starts one request whose bank is idle, chosen by class:

1. a CPU request hitting the open row,
2. the oldest CPU request,
3. a request hitting the open row (first-ready),
4. the oldest request (first-come first-served).

Classes 1 and 2 exist only with `CPU_FIRST = 1`, the default. Rows stay open
(open-page policy). A bank serving a request is busy for `T_CL + T_BURST`
cycles on a row hit, `T_RCD + T_CL + T_BURST` on an idle bank and
`T_RP + T_RCD + T_CL + T_BURST` on a row conflict (12, 12, 12 and 2 by
default). It then offers its completion on the shared data bus. One completion
leaves per cycle, lowest bank first, and only when `resp_ready` is high. A bank
whose reply is held stays busy, so congestion in the reply network slows the
DRAM, as it does in a real system. Every access started is shown on `dram_cmd`
with its row-buffer outcome and counted in `n_hit`, `n_closed` and
`n_conflict`.

This is a request-level model of DRAM timing. It covers the three row-buffer
cases and one data transfer at a time. It does not cover tRAS, tFAW, write
recovery, bus turnaround or refresh. The same module with `NBANK = 8` serves the
CPUs' DDR3 channel.

## Top level: `temp_tbas_top`

Default configuration: 8 SMs, 8 block slots and 48 warp slots per SM, 2 GDDR5
channels of 16 banks, 1 DDR3 channel of 8 banks, 64-entry queues. All ports are
plain signals, packed structs (`dram_req_t`, `dram_cmd_t` from `temp_pkg`) or
unpacked arrays indexed by SM or channel.

* **Launch:** pulse `load` with `load_head[s]`, `load_tail[s]`, `load_stride` and
  `warps_per_block` (the last two are shared by all SMs).
* **Per SM, to and from its pipeline:** `issue_valid/issue_warp` together with
  `issue_tb_id`, `issue_wib` (warp index in block) and `issue_age` (batch
  ordinal). The pipeline answers in the same cycle with `issue_stall`, and later
  with `wake_valid/wake_warp` and `exit_valid/exit_warp`, at most one of each
  per cycle. Also `dispatch_valid/dispatch_tb_id`, `promote`, `demote`,
  `run_valid/run_age` and `sm_idle`.
* **Per SM, memory requests:** the pipeline puts a physical address on
  `sm_req_addr[s]` (plus `sm_req_write`, `sm_req_tag`). The design returns the
  target channel `sm_req_ch[s]`, the decoded `sm_req_dram[s]` and `sm_req_local[s]`
  combinationally. The network that moves the request is outside.
* **Per channel:** `mc_req_valid/ready/mc_req` in and `mc_resp_*` out, valid/ready
  handshakes. The `ddr_*` ports do the same for the DDR3 channel. CPU requests
  enter through the same ports with `is_cpu = 1`.

Timing: the front-ends are registered, and issue is decided combinationally
from their state and the current events. The mapper is combinational. Each
controller accepts one request and returns one reply per cycle.

## Parameters

| name | default | from |
|---|---|---|
| SMs | 8 | paper |
| block slots per SM | 8 | paper (Fermi-class SM) |
| warp slots per SM | 48 | paper: 1536 threads, warp of 32 |
| GDDR5 channels x banks | 2 x 16 | paper |
| DDR3 channels x banks | 1 x 8 | paper |
| request queue per controller | 64 | paper |
| page size | 4 KB | paper |
| controller policy | FR-FCFS, open page, CPU first | paper |
| physical address, byte offset, column | 32, 3, 9 bits | own choice |
| thread block id, batch ordinal, tag | 16, 16, 12 bits | own choice |
| `MIN_ACTIVE` ("enough ready warps") | 1 | own choice |
| T_RP, T_RCD, T_CL, T_BURST | 12, 12, 12, 2 cycles | own choice (GDDR5-like) |
| colors per SM | 4, contiguous | own choice |

## Where this departs from the scheme or fills gaps

* The paper's walk-through has a running set of two warps. Here the running set
  is all ready warps of the running batch, with no separate cap. "Enough ready
  warps" is a parameter.
* Batch formation by a modulo rule, which a few kernels would need, is not
  implemented. Only the fixed thread block stride is.
* The operating-system side (choosing colors for pages, reserving the upper rows
  of every bank for CPU pages) is not hardware and is not here. The end-to-end
  testbench does it in its own model.
* DRAM timing is the simplified per-bank latency model described above.
* The CCWS cache-locality throttling, which TBAS replaces, is not included.
* The simulated figures (speed-ups, energy) are not reproduced. This RTL has no
  caches or execution pipeline.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it shows |
|---|---|
| `tb_dispatch_queue` | ids and batch ordinals for several ranges and strides; empty handling; reload |
| `tb_block_launcher` | pop exactly when a slot and enough warps are free; warp tables; slot release |
| `tb_batch_priority_arbiter` | oldest eligible wins; ties; nothing eligible |
| `tb_tbas_scheduler` | cycle-exact comparison with a reference model: issue, round-robin, demotion, oldest-first promotion |
| `tb_sm_frontend` | a 20-block kernel on one SM: order, batch membership of every issue, every warp exits once |
| `tb_page_color_mapper` | field split, color, owner SM, local flag |
| `tb_frfcfs_mc` | hit/idle/conflict latencies, row hit before an older miss, CPU before an older GPU hit, full queue, reply back-pressure, random traffic |
| `tb_temp_tbas_top` | full default size: 128 blocks on 8 SMs with CPU traffic on all three channels. Checks dispatch order, running-batch membership, address mapping, every reply and exit. Counts promotions, demotions, local and remote accesses, row hits, idle-bank accesses and conflicts, full queues, reply stalls and CPU requests overtaking GPU ones |

Two more testbenches run scenarios rather than single modules:

| testbench | what it shows |
|---|---|
| `tb_tbas_worked_example` | the four-batch example of the TBAS section on one SM (one block per batch, two warps per block, two batches per bank row, loads answered after 6 cycles). The running batch must follow 0, 1, 0, 1, 2, 3, 2, 3, and all loads to the first row must come before any load to the second, so the bank changes row once |
| `tb_thread_data_mappings` | the whole design at default size, running the two thread-data mappings that motivate batching: 1D blocks with two matrix rows per page (stride 2), and a 2D grid four blocks wide whose grid rows share a page (stride 4). Both must be 100% local. A third run splits the first kernel over the SMs at odd block boundaries, so pages straddle SMs; its remote accesses must match the count predicted from page ownership (80 of 2048) |

The top-level test runs the default configuration in about 1,500 cycles, which
takes well under a minute. The mapping test runs three kernels of 128 blocks in
about 6,000 cycles.

## Simulating

Everything is SystemVerilog-2017. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/temp_pkg.sv tb/tb_temp_tbas_top.sv --top-module tb_temp_tbas_top
./obj_dir/Vtb_temp_tbas_top
```

Replace the testbench name to run another one. The block testbenches override
parameters to keep their cases small. The top-level testbench leaves every
parameter at its default. Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/temp_pkg.sv rtl/<module>.sv`.

## Files

* `rtl/temp_pkg.sv`: sizes, `dram_req_t`, `dram_cmd_t`, `row_outcome_e`
* `rtl/dispatch_queue.sv`, `rtl/block_launcher.sv`, `rtl/batch_priority_arbiter.sv`,
  `rtl/tbas_scheduler.sv`, `rtl/sm_frontend.sv`: SM side
* `rtl/page_color_mapper.sv`, `rtl/frfcfs_mc.sv`: memory side
* `rtl/temp_tbas_top.sv`: top
* `tb/tb_*.sv`: one testbench per module, plus the two scenario testbenches above
