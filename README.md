# FengHuang node: shared tensor memory behind a bridge, in SystemVerilog

Large-model inference runs out of accelerator memory long before it runs out of
compute. In a FengHuang node, each accelerator (xPU) keeps only a small, fast
local memory. A large pool of cheap memory sits behind one shared chip, the
**Tensor Addressable Bridge (TAB)**, and every xPU in the node can read it and
write it. Two mechanisms make this work:

* **Paging.** A hardware *tensor prefetcher* in each xPU copies the tensors of
  the next kernel from the shared pool into local memory while the current
  kernel computes. It writes finished tensors back in the background.
* **Collectives through memory.** xPUs do not send tensors to each other. They
  write them into the shared pool. A *write-accumulate* operation adds the
  incoming data to the data already stored, so an AllReduce is simply every
  xPU writing its partial result onto the same lines. The TAB then sends a
  *write-completion notification* to tell the xPUs involved that the result is
  ready.

This repository holds synthesizable RTL for the digital part of such a node:
the TAB with its per-module reduction engines and notification unit, and the
per-xPU prefetcher and link multiplexer. The memory devices, their
controllers and PHYs, the serial links and the xPU cores are not included;
their signals are ports of the top module `fh_node`.

```
        xPU 0 .. xPU 3 (cores and local memory outside the RTL)
   core_req/rsp   desc, exec_kernel     lm_* (local memory port)
        |               |                     |
   +----v---------------v---------------------v-----+  x NUM_XPU
   | fh_xpu_mux  <----  fh_prefetcher                |
   +----------------------|--------------------------+
                          | one link per xPU (req / rsp / notification)
   +----------------------v--------------------------------------------+
   | fh_tab   fh_xbar: every port -> the shard owning the line           |
   |          fh_shard_ctrl x NUM_MEM: read / write / write-accumulate   |
   |          fh_notify: counts retired writes, notifies xPUs            |
   +----------------------|--------------------------------------------+
                          | mem_rd_* / mem_wr_*  x NUM_MEM
                 remote memory modules (outside the RTL)
```

## One address space, striped over the memory modules

The shared pool is one byte-addressed space with `ADDR_W = 41` bits, which is
enough for the 1152 GB node. Data moves in 64-byte lines, so the data path is
`DATA_W = 512` bits wide. `fh_stripe_map` splits an address into two parts:

    line  = addr / 64
    shard = line mod NUM_MEM        (which memory module)
    laddr = line div NUM_MEM        (line inside that module)

Consecutive lines therefore fall on consecutive modules. A tensor of any size
spreads evenly over all modules, and a streaming xPU keeps every module busy.
The striping granule of one line is this design's choice.

## Requests on a link

Every xPU link carries one request type, `fh_req_t`, defined in `fh_pkg`:

| op        | meaning                                                     | response |
|-----------|-------------------------------------------------------------|----------|
| `OP_READ` | read one line                                               | `RSP_RDATA` with the data |
| `OP_WRITE`| write one line                                              | `RSP_WACK` |
| `OP_WACC` | add the line to the stored line, lane by lane (16 lanes of 32-bit two's complement) | `RSP_WACK` |
| `OP_NCFG` | arm notification group `grp`: expect `data[31:0]` retired writes, then notify the xPUs set in `data[47:32]` | none |

Writes and write-accumulates carry a `notify` bit and a group number `grp`
(four bits, so 16 groups). Responses carry back the request's 8-bit `id`.
Responses to one xPU can arrive out of order when its requests target
different modules. Each module answers in order.

The integer lane format is an assumption. The source gives no number format
for accumulation, and an integer adder keeps the reduction exact and easy to
check. A floating-point adder would replace `fh_pkg::lane_add`.

## The shard engine (`fh_shard_ctrl`): reduction at line rate

This engine is the hardest part of the design. One engine sits in front of
each memory module. It must do three things:

- accept one operation per cycle;
- hide a memory round trip that is long compared with the clock;
- never lose an update when several xPUs accumulate into the same line.

**In-flight table.** Accepted operations enter an in-order table of
`PEND = 256` entries. Reads and write-accumulates send their memory read as
soon as they enter the table. Memory returns read data in order. A small FIFO
of table indices tells each returned line which entry it belongs to. A
write-accumulate forms its sum right there.

**Retiring.** Entries retire in order, oldest first. When an entry retires,
its memory write (for a write or a write-accumulate) and its response leave
together. A write is posted: it is acknowledged once the module has accepted
it. A retiring write that asked for notification pulses `commit_valid` with
its group.

**Same-line hazard.** An operation whose line matches a write or
write-accumulate still in the table waits at the table's entrance.
`hazard_stall` is high while it waits. This is how two accumulations into one
line are serialised: the second reads the line only after the first has
written it. Operations on different lines are never held back.

**Rate.** As long as `PEND` covers the memory round trip, the engine streams
one operation per cycle. The source gives the round trip from bridge to memory
and back as 40 + 50 + 40 ns.

Measured in the testbenches, with a 20-cycle memory model:

- 64 write-accumulates on distinct lines retire in 86 cycles;
- 256 write-accumulates spread over four modules retire in 87 cycles;
- a read through the TAB takes 22 cycles, of which 2 are the TAB's own;
- a posted write is acknowledged 3 cycles after the TAB accepts it.

An AllReduce in which every xPU hits the same lines in the same order is
slower. Each line is then updated NUM_XPU times in a row, and each update
waits for one memory round trip. The end-to-end test shows exactly this
pattern, and the reduction-stall counter records it. Spreading the xPUs'
start lines would remove most of the stall. That is software's choice.

## Completion notification (`fh_notify`)

A collective is finished when all of its writes have landed. The TAB cannot
know on its own how many writes that is, so an xPU tells it:

1. One xPU sends `OP_NCFG` for group *g*. It carries the expected count *N*
   and the mask of xPUs to notify.
2. Every participating write or write-accumulate is sent with `notify = 1`,
   `grp = g`.
3. The unit counts retired writes per group, from any number of modules in
   the same cycle. Counting starts before the group is armed, so the arming
   request can arrive late.
4. When an armed group reaches *N*, the unit subtracts *N*, disarms the group
   and posts a notification to each xPU in the mask. Each xPU has one output
   `ntf_valid`/`ntf_grp`. It shows one group per cycle, lowest first, and has
   no back-pressure. A notification appears two cycles after the last commit.

How each collective uses it:

| collective             | writes                                               | arm with                       | then |
|------------------------|------------------------------------------------------|--------------------------------|------|
| AllReduce / ReduceScatter | every xPU write-accumulates its chunk onto the same lines | N = xPUs x lines, all xPUs | all read everything / their share |
| AllGather / AllToAll   | every xPU writes its own chunk                        | N = total lines, all xPUs      | all read everything / their share |
| P2P send/recv          | sender writes                                         | N = lines, mask = receiver only | receiver reads |

Groups, counters and the arming request are this design's own mechanism. The
source says only that the TAB notifies the xPUs once the writes have
completed.

## Tensor prefetcher (`fh_prefetcher`)

Software describes a tensor transfer with a descriptor, `fh_desc_t`:

- direction (`PAGE_IN` or `PAGE_OUT`);
- remote byte address;
- first local line;
- number of lines;
- index of the kernel that needs it (page-in) or that produced it (page-out).

Descriptors wait in a queue of `DQ_D = 8`. The head starts only when its
kernel index is at most `exec_kernel + WINDOW`. `exec_kernel` is the kernel
the xPU is executing. With `WINDOW = 1`, the lookahead-1 schedule, the data
of kernel *k+1* moves while kernel *k* runs, and nothing further ahead moves.
While the head waits, `window_stall` is high.

- **Page-in** issues one read per line, with up to `OUT_D = 16` reads
  outstanding. A slot table indexed by the id matches responses that return
  out of order. Each line is written to local memory as it arrives.
- **Page-out** reads local memory into a 4-line buffer (`PO_D`) and issues
  remote writes from it.

A descriptor is done when every line has landed. `done_valid` then pulses
with its kernel and direction. Prefetcher ids have their top bit set, and
`fh_xpu_mux` uses that bit to send each response to the prefetcher or to the
cores. The mux shares the xPU's single link between the two round-robin.
`link_busy` on the top shows when a request is waiting on a link.

## Parameters

| parameter | default | from the source | meaning |
|-----------|---------|-----------------|---------|
| `NUM_XPU` | 4       | 4 (the evaluated four-xPU node) | xPU ports on the TAB |
| `NUM_MEM` | 4       | 4 (one memory bank per xPU in the collective diagrams) | remote memory modules |
| `PEND`    | 256     | no              | operations in flight per module |
| `WINDOW`  | 1       | 1               | prefetch window in kernels |
| `OUT_D`   | 16      | no              | outstanding page-in reads per xPU |
| `ADDR_W`  | 41      | from 1152 GB    | remote byte address |
| `LOC_AW`  | 29      | no              | local line address (32 GiB) |
| line / lane | 64 B / 32 bit | no        | transfer unit / accumulation lane |

`NUM_XPU` may go up to 16 (`MAX_XPU`, the width of the notification mask).
`NUM_MEM` need not be a power of two.

## Where this RTL departs from or goes beyond the source

- **Number of memory modules.** The node overview figure draws six LPDDR6
  modules behind the bridge. The collective diagrams and the scaling text tie
  memory to the GPU count (144 GB x N). The default follows the latter: four
  modules for four xPUs. Six is a valid setting.
- **Bandwidth.** The source quotes 4.0 to 6.4 TB/s per xPU link. This RTL
  moves one 64-byte line per cycle per link, which is 64 GB/s per GHz. It
  models the protocol and the ordering, not the link width. Reaching the
  quoted rates needs a much wider or replicated data path.
- **Capacity.** The default address covers 2 TiB, which holds the evaluated
  1152 GB node. The larger TAB memories mentioned as a future option (about
  4 TB) need one more address bit. Set `REMOTE_BYTES` in `fh_pkg`, and
  `ADDR_W` follows.
- **Write ordering.** The source relaxes write ordering for accumulation,
  since the adds commute. The engine still serialises updates to the same
  line, which is needed to keep every update. Across lines and across xPUs
  there is no ordering.
- **Own choices.** The numeric format, the request encoding, the
  notification groups, the descriptor format and all queue depths are this
  design's own choices.
- **Not modelled.** The LPDDR6 devices, their controller and PHY, the SerDes
  links and their latency (40 ns per hop in the source), the xPU cores and
  their local HBM are all outside the RTL.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

`tb_fh_node` runs the whole node at its default parameters. It pages weights
in for kernel 1 and lets the kernel-2 page-in wait for the window. It then
runs an AllReduce with write-accumulate while the prefetchers use the same
links, reads back the ReduceScatter and AllReduce results, runs an AllGather,
an AllToAll, a P2P transfer and a page-out, and checks every line against values the
testbench computes. It counts page-ins, page-outs, window stalls, same-line
reduction stalls, notifications and link contention, and fails if any of
them never happened. It finishes in about 3,500 cycles with 420 checks.

`tb/fh_remote_mem_model.sv` and `tb/fh_local_mem_model.sv` are behavioural
memories. They have configurable latency and random back-pressure.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/fh_pkg.sv tb/tb_fh_node.sv --top-module tb_fh_node
./obj_dir/Vtb_fh_node
```

Replace `tb_fh_node` with any other testbench, for example `tb_fh_tab`,
`tb_fh_shard_ctrl`, `tb_fh_notify`, `tb_fh_prefetcher`, `tb_fh_xbar`,
`tb_fh_xpu_mux` or `tb_fh_stripe_map`.

## Files

| file | content |
|------|---------|
| `rtl/fh_pkg.sv` | sizes, opcodes, request/response/descriptor structs, lane adder |
| `rtl/fh_node.sv` | top: TAB plus one mux and prefetcher per xPU |
| `rtl/fh_tab.sv` | bridge: crossbar, shard engines, notifier |
| `rtl/fh_xbar.sv` | port-to-shard crossbar with round-robin arbitration |
| `rtl/fh_stripe_map.sv` | address to module and line |
| `rtl/fh_shard_ctrl.sv` | per-module engine with write-accumulate |
| `rtl/fh_notify.sv` | write-completion notification groups |
| `rtl/fh_prefetcher.sv` | page-in / page-out engine |
| `rtl/fh_xpu_mux.sv` | core/prefetcher link sharing |
| `rtl/fh_fifo.sv`, `rtl/fh_rr_arb.sv` | helpers |
