# CP-PACS: slide-windowed registers and the Hyper Crossbar, in SystemVerilog

CP-PACS was a 2048-node distributed-memory parallel computer built in Japan in
1996 for lattice QCD. It had a peak of 614 GFLOPS: 2048 nodes at 300 MFLOPS.
Its design rests on two ideas, and this RTL is about those two.

* **Pseudo-vector processing on a RISC node (PVP-SW).** A cache-based RISC
  processor slows down sharply once a loop's data no longer fits in its
  caches. CP-PACS gives each node 128 physical floating-point registers. A
  program sees them through a window of 32 registers that slides along the
  128. Preload instructions fetch memory words into registers of a *later*
  window. Poststore instructions write back registers of an *earlier*
  window. Neither waits for memory. A loop that slides the window once per
  iteration can therefore keep many memory accesses in flight at once. The
  memory has several interleaved banks, so those accesses are served as a
  pipeline, and a long memory latency is hidden much as on a vector machine.
* **A three-dimensional Hyper Crossbar network.** The nodes form an
  8 x 17 x 16 array: 8 x 16 x 16 processing units (PUs) plus an 8 x 16 plane
  of I/O units (IOUs) at the far end of y. Every line of nodes along x, y or
  z is joined by one full crossbar. Each node reaches the three crossbars
  through a small switch called an *exchanger*. A message first crosses the
  x crossbar, then the y crossbar, then the z crossbar, so it passes at most
  three switches. Messages are Remote DMA transfers from one node's user
  memory straight into another's, carried by wormhole routing.

The RTL covers, for one node:

* the register file and the preload/poststore machinery;
* the storage controller with the interleaved main memory;
* the network interface adapter (NIA), the node's Remote DMA engine.

For the network it covers the exchangers and the x, y and z crossbars. The
top module assembles the full machine at the published sizes. The PA-RISC
core itself, its floating-point units and caches, and the I/O units are not
modelled. Their signals are ports (see "What is outside the RTL").

## Sizes

| quantity | value in the RTL | origin |
|---|---|---|
| nodes | 8 x 16 x 16 PUs + 8 x 16 IOUs (`NX`, `NY`, `NZ` = 8, 16, 16) | published |
| physical / logical FP registers | 128 / 32 (`NPHYS`, `NLOG`) | published |
| data word | 64 bits | published |
| main memory per PU | 64 MByte = 8M words (`MEM_WORDS`) | published |
| crossbar bandwidth | one 16-bit flit per port per cycle = 300 MB/s at 150 MHz | rate published; flit width chosen to meet it |
| global registers per window | 8 (`NGLOBAL`) | chosen |
| outstanding preloads | 16 (`QDEPTH`) | chosen |
| memory banks, bank busy time, read latency | 8, 4 cycles, 8 cycles (`NBANKS`, `BANK_BUSY`, `RD_LAT`) | chosen |
| NIA read-ahead buffer | 4 words (`WBUF`) | chosen |

Every parameter defaults to the published value where one exists.

## The slide-windowed register file (`sw_regfile`)

An instruction names a logical register 0..31. Logical registers
`0..NGLOBAL-1` are *global*: they are the same physical registers in every
window. Logical registers `NGLOBAL..31` are *local*, and their physical
place depends on the window pointer `fwp`:

    phys(r) = r                                                  if r < NGLOBAL
    phys(r) = NGLOBAL + ((r - NGLOBAL + fwp) mod (128 - NGLOBAL))   otherwise

Sliding the window by `n` adds `n` to `fwp`, modulo `128 - NGLOBAL`. The
120 local physical registers thus form a ring, and the 24-register local
part of the window moves around it. The key consequence: **local register
`r + n` before a slide by `n` is local register `r` after it.** A value
loaded into register 31 of the window `K` slides ahead becomes visible as
register 31 once the loop has slid `K` times.

Preload and poststore name a register together with a signed window offset
`ls_delta`:

* positive for a following window (preload target);
* negative for a previous window (poststore source).

The register file translates the pair with the same formula, using
`fwp + ls_delta`. The translation happens when the instruction issues, so
later slides cannot redirect data that is already in flight.

Each physical register has a *pending* bit. It is set when a preload to it
issues and cleared when the data arrives. A read or write of a pending
register raises `rs1_busy`, `rs2_busy` or `wr_busy`, and the core must wait.
This is the only interlock. Reads are combinational; writes take effect at
the clock edge.

A typical loop, as run by the node testbench, computes `y[i] = 3*x[i] + 1`:

    prologue: preload x[0..K-1] into (r31, window +0 .. +K-1)
    iteration i:
        preload  x[i+K]   -> (r31, window +K)
        read     r31      (= x[i], preloaded K iterations ago)
        write    r20      <- 3*x[i] + 1
        poststore (r20, window -2) -> y[i-2]
        slide 1

With an 8-cycle memory, `K = 1` costs 133 stall cycles over 64 elements.
`K = 12` costs none.

## Preload/poststore unit and storage controller

`preload_poststore_unit` sends each request to memory in the cycle it is
accepted. For a preload it pushes the translated physical register number
onto an in-order queue of `QDEPTH` entries. Memory answers in order, so the
head of the queue names the register that the returning word goes to. Issue
stops when:

* the queue is full;
* memory is not ready;
* the register concerned is still pending. A second preload into a pending
  register waits, which keeps completion order unambiguous.

`storage_controller` is the node's memory system. Port 0 serves
preload/poststore; port 1 serves the NIA. The word address is interleaved
on its low bits (bank = address mod 8), so a unit-stride stream visits a
different bank every cycle. A bank stays busy for `BANK_BUSY` cycles after
an access. A request to a busy bank waits: a unit-stride stream is accepted
every cycle, a stride-8 stream only every fourth cycle. Both ports are served
in the same cycle when they address different free banks. When both want
the same bank, priority alternates. Reads return exactly `RD_LAT` cycles
after acceptance. The banks themselves are plain synchronous arrays
(`memory_bank`).

## Remote DMA and the packet format (`nia`)

A Remote DMA *put* command gives:

* a destination node;
* a local source word address;
* a remote destination word address;
* a length in words.

The NIA reads the block through the storage controller, reading up to 4
words ahead. It sends the block as one packet of 16-bit flits, each with
sideband `head` and `tail` bits:

| flit | contents |
|---|---|
| 0 (head) | destination `{4'b0, x[2:0], y[4:0], z[3:0]}` |
| 1, 2 | remote word address, high then low half |
| 3 | length in words (a length of 0 ends the packet here) |
| 4.. | each 64-bit word as four flits, most significant first; the last flit has `tail` |

Once the header is out, the data streams at one flit per cycle. On the
receiving node the NIA rebuilds each word and writes it to memory. The
processor is not involved. While a write waits for a memory bank, the NIA
holds its network input, so back-pressure spreads into the network. Writes
take priority over the NIA's own send reads. `send_done` and `recv_done`
pulse at the end of each transfer.

## The Hyper Crossbar (`exchanger`, `crossbar_switch`, `cppacs_system`)

Every node has an `exchanger` with four ports: 0 = local node, 1 = x,
2 = y, 3 = z crossbar. A head flit that enters on port `p` leaves on the
first dimension after `p` in which its destination differs from the
exchanger's own coordinate. If there is none, it leaves on the local port.
Packets therefore always go x, then y, then z. This fixed order is what
prevents deadlock. The exchanger has no buffers.

A `crossbar_switch` of `N` ports joins all exchangers on one line. A packet
leaves on the port equal to its destination coordinate in that dimension.
Both switches use the same core (`wormhole_switch`):

* an output that is free arbitrates round-robin among head flits that want
  it;
* it then stays locked to the winning input until that packet's tail has
  passed;
* the other packets wait where they are.

Each crossbar output has a two-flit FIFO, so one crossbar hop costs one
cycle and every port carries one flit per cycle.

In `cppacs_system` there are three sets of crossbars:

* 17 x 16 x-crossbars of 8 ports;
* 8 x 16 y-crossbars of 17 ports, port 16 being the I/O unit;
* 8 x 17 z-crossbars of 16 ports.

Node coordinates reach the exchangers as port values, not parameters, so
all 2176 exchangers share one module.

**Bisection.** The machine can be split in x, y and z into as many as 8
independent partitions. Here `split_x`, `split_y` and `split_z` each cut
every crossbar of that dimension in half. A packet that would cross the cut
is discarded and `partition_violation` pulses. The I/O port of a y crossbar
belongs to both halves, so every partition keeps its I/O units.

## What is outside the RTL

* **The PA-RISC 1.1 superscalar core**, its floating-point units and its
  16 KB + 16 KB level-1 and 512 KB + 512 KB level-2 caches. Only their
  sizes or names are published. Each PU's `cpu_in` / `cpu_out` structs
  (`cppacs_pkg`) carry what the core would drive and see:
  * register reads and writes;
  * window slides;
  * preload/poststore issue;
  * Remote DMA commands.

  Preloads here go straight to memory, not through the caches.
* **The I/O units** and their SCSI-II disks, the HIPPI link to the
  front-end host, and the clock distribution. The IOU exchanger ports are
  the `iou_*` ports of the top.

## How this differs from the published machine

* Everything marked "chosen" in the size table.
* The packet format, the flit width, round-robin arbitration, the buffer
  depths and the discard-on-violation rule.
* Only Remote DMA *put* is built. Get, interrupts, and the operating
  system's part of a transfer are not.
* The published message latencies (2.45, 2.83 and 3.09 us through one, two
  and three crossbars) include software overhead. This RTL does not
  reproduce them. In hardware, a hop costs one cycle per crossbar, plus the
  memory latency at each end.
* x and z crossbars are also placed on the I/O plane, as on the PU planes.
* Memory holds no ECC and has no refresh. DRAM is modelled as arrays with a
  fixed latency and bank busy time.

## Files

| file | contents |
|---|---|
| `rtl/cppacs_pkg.sv` | flit, coordinate, command and core-interface types |
| `rtl/sw_regfile.sv` | slide-windowed register file |
| `rtl/preload_poststore_unit.sv` | preload/poststore issue and completion |
| `rtl/memory_bank.sv`, `rtl/storage_controller.sv` | interleaved main memory |
| `rtl/nia.sv` | Remote DMA engine |
| `rtl/rr_arbiter.sv`, `rtl/wormhole_switch.sv`, `rtl/flit_fifo.sv` | switch building blocks |
| `rtl/exchanger.sv`, `rtl/crossbar_switch.sv` | network switches |
| `rtl/processing_unit.sv` | one node |
| `rtl/cppacs_system.sv` | the whole machine (top) |
| `tb/tb_<module>.sv` | self-checking testbench for each module above |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
For example:

    verilator --binary --timing --assert -y rtl rtl/cppacs_pkg.sv \
        tb/tb_processing_unit.sv --top-module tb_processing_unit
    ./obj_dir/Vtb_processing_unit

Replace the testbench name for the others. What the testbenches check,
against values they compute themselves:

* **`tb_sw_regfile`**: the window mapping against an independent modulo
  model, wrap-around, global registers, the busy flags, and translation
  with a positive or negative offset.
* **`tb_preload_poststore_unit`**:
  * 16 preloads in flight at once;
  * a stall when the queue is full;
  * a stall on a pending register;
  * data landing in the register named at issue.
* **`tb_storage_controller`**:
  * exact `RD_LAT` timing;
  * a unit-stride stream at one access per cycle;
  * a same-bank stream at one access per `BANK_BUSY` cycles;
  * dual-port service and random traffic.
* **`tb_nia`**: the packet format flit by flit, 256 data flits in 256
  cycles, and copies under random back-pressure.
* **`tb_exchanger`**, **`tb_crossbar_switch`**:
  * every legal turn;
  * whole, uninterleaved packets, in order per source, under random
    back-pressure;
  * a one-cycle hop at one flit per cycle;
  * bisection, including the I/O port.
* **`tb_processing_unit`**: the vector loop above and a Remote DMA loopback.
* **`tb_cppacs_system`**: the whole machine at 4 x 4 x 4 PUs (plus the I/O
  plane), with 1024-word memories. It checks:
  * puts through one, two and three crossbars;
  * two puts contending for one destination;
  * traffic from PU to IOU and from IOU to PU;
  * a put discarded at a y bisection.

  It counts that x, y and z traversals, back-pressure, bisection
  violations, bank conflicts, register stalls and window slides all occur.

At the published size the machine cannot be simulated: 2048 x 64 MByte of
memory arrays is 128 GByte. The largest configuration simulated is the
4 x 4 x 4 system above. Linting the full-size top with Verilator takes a few
minutes and about 10 GByte of memory, growing linearly from about 4.7 MByte
per node.

## Does a benchmark fit?

Memory per node decides this. The LINPACK runs published for CP-PACS use
problem orders from 2340 on 1 PU to 103680 on 2048 PUs. Every row needs
about 63-65 % of the aggregate memory at 64 MByte per PU. For example, on
2048 PUs the matrix is 103680^2 x 8 bytes = 82 GByte against 128 GByte. All
rows fit the default configuration. The lattice QCD programs are published
without lattice sizes, so their memory needs cannot be stated.
