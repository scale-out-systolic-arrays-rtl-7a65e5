# SOSA: a scale-out systolic array accelerator in SystemVerilog

A single large systolic array is fast on paper, but most DNN layers leave much
of it idle. This design uses many small arrays instead: 256 *pods*, each a
32 x 32 weight-stationary systolic array. They share on-chip memory through
Butterfly interconnects. An offline scheduler cuts every GEMM into tile
operations of equal length, and the whole chip runs them in lock step.

- In each time slice, a pod multiplies a 32 x 32 activation tile by a 32 x 32
  weight tile. It can also add a partial-sum tile on the way.
- Every tile comes from a memory bank and every result goes back to one.
- The routes through the interconnects are fixed in advance for each slice.

This RTL implements that architecture as published in "Scale-out Systolic
Arrays" (SOSA), in its main configuration. Everything the publication leaves
open was decided here; the choices are marked below.

| | default | from |
|---|---|---|
| pods `N` | 256 | publication |
| array `R x C` | 32 x 32 | publication |
| activation multicast `U` / psum fan-in `V` | 16 / 16 | publication |
| weights, activations / partial sums | int8 / int16 | publication |
| interconnect | Butterfly with expansion `K = 2` | publication |
| banks | 256 activation, 256 weight, 256 psum; 256 KB each | publication (N banks per data type, 256 KB) |
| time slice | `SLICE = R = 32` cycles | publication ("fixed time slices of r cycles") |
| instruction memory | 1024 x 64 bit | own choice |
| pod task queue | 4 entries | own choice |
| CONV-to-GEMM window | kernel width 1, 2 or 4 (`KMAX = 4`) | own choice |

## The chip

```
            host port (stands in for DRAM / host CPU)
                 |                       |
          instruction memory ---> main controller --- control bus + slice_start
                                                         | (to every unit)
 activation banks --X-------> +---------+
 weight banks     --W-------> |  pods   | --POUT--> psum banks
 psum banks       --PIN-----> | 0..N-1  |
                              +---------+
 psum banks --PPIN--> post-processor lanes 0..N-1 --PPACT--> activation banks
                                                  --PPPSUM-> psum banks
```

There are seven N x N Butterfly-2 networks, named after the data they carry
(X, W, PIN, POUT, PPIN, PPACT, PPPSUM). The publication draws two networks on
each side of the partial-sum banks, carrying data in both directions. Here
each direction is a separate one-way network.

Each bank is single ported: in a given cycle it either reads or writes one
row. The row widths are:

- activation row: 32 x 8 bit, one feature vector of one pixel or token;
- weight row: 32 x 8 bit, one row of a weight tile;
- partial-sum row: 32 x 16 bit.

There are N post-processor lanes, one per pod. They are built as N/2 pairs,
because summing two partial-sum tiles takes two operand streams at the rate
of one pod.

## Inside a pod

```
x rows --> CONV-to-GEMM --> skew (per row group) --+
                                                   v
w rows ---------------------------------> systolic array (R x C, 2 weight regs / PE)
                                                   ^          |
psum in --> skew (per column group) ---------------+          v
                                          deskew --> psum out
task queue --> pod FSM (load / compute / use_pin / conv, weight-register select)
```

**Processing element** (`sosa_pe`). A PE computes
`psum_out = psum_in + act * w[wsel]`. The multiply is 8 x 8 bits, signed,
and the sum wraps to 16 bits. Each PE has two weight registers: one feeds the
current tile while the next tile's weights are written into the other.

**Multicast and fan-in** (`systolic_array`). This is the least obvious part
of the design. A standard systolic array registers every hop. Here:

- An activation is broadcast combinationally across `U = 16` PEs of a row,
  then registered once per *column group* (`g = j / U`).
- A partial sum ripples combinationally down `V = 16` PEs of a column, then
  is registered once per *row group* (`b = i / V`).

A 32 x 32 array therefore has only two pipeline stages each way, instead of
32.

For the right products to meet, the inputs are skewed by group instead of by
row or column:

- activation row `i` enters `b(i)` cycles late;
- the input partial sum of column `j` enters `g(j)` cycles late;
- the result of column `j` leaves after `g + R/V` cycles;
- the deskew buffer delays it a further `C/U - 1 - g` cycles, so all columns
  of an output row appear together.

**Weight loading.** Weights are written by broadcast: a row index and the row
travel down every column, one register stage per column group. This follows
the activations that use the register, so a load can run in the same slice as
a compute that uses the *other* register. The register select (`wsel`) rides
along with each activation.

**Pod latency.** From an input row to its output row the pod takes
`PIPE = KMAX + C/U - 1 + R/V = 4 + 1 + 2 = 7` cycles. `KMAX` is the fixed
latency of the converter.

**CONV-to-GEMM converter** (`conv2gemm`). It keeps the last `KMAX` input rows
(pixels). In convolution mode with kernel width `KW`, it builds GEMM row `t`
from pixels `t .. t+KW-1`: GEMM feature `f = k*ch + c` is channel `c` of
pixel `t+k`, with `ch = R/KW` channels per pixel. Each pixel is read from its
bank only once, even though `KW` rows use it. The tile then reads
`R + KW - 1` pixels.

In GEMM mode the rows pass through with the same `KMAX` delay, so the pod
latency does not depend on the mode.

The converter the publication cites is a full 4-D converter. This one is 1-D
only; other convolutions must be laid out as GEMM rows by the scheduler.

**Pod FSM and task queue** (`pod_fsm`, `task_queue`). The controller pushes a
task word for a later slice: load weights, compute, use input psums,
convolution and its kernel width. Tasks are tagged with their slice number.
At the start of each slice the FSM pops the head task only if the tag
matches, so a pod with nothing to do in a slice simply stays idle.

The FSM counts the incoming weight rows into the idle register. It feeds
activation rows with the right weight select, zeroes the input psums of tasks
without `use_pin`, and marks valid output rows.

## Time slices and the control bus

The program is a list of 64-bit instructions, grouped into slices and closed
by `SYNC`. The controller issues one instruction per cycle on a control bus
that every unit watches. Each instruction carries the number of the slice it
prepares.

| op | fields | effect in the next slice |
|---|---|---|
| `ROUTE` | `tgt` = network, `sub` = link (0..K-1), `a` = source, `b` = destination | one path through one network |
| `RD` | `tgt` = bank group, `a` = bank, `addr`, `flags[3:0]` = extra rows | bank reads `R` (+extra) rows from `addr` |
| `WR` | `tgt`, `a`, `addr`, `flags[0]` = writer (0 pods, 1 post-processors) | bank writes up to `R` incoming rows from `addr` |
| `POD` | `a` = pod, `flags` = `{log2_kw[5:4], conv[3], use_pin[2], compute[1], load_w[0]}` | task for that pod |
| `PP` | `a` = lane, `flags[1:0]` = NONE / ACT / ADD / ADD_ACT, `addr[3:0]` = shift | post-processor operation |
| `SYNC` | | end of slice: wait until `SLICE` cycles have passed, then pulse `slice_start` |
| `END` | | wait for the last results, raise `done` |

Every unit keeps its next-slice settings in a shadow copy, so the program for
slice n+1 is issued while slice n runs. The hard part is the timing: data of
slice n is still in flight when slice n+1 begins. Each unit therefore switches
to its new settings at the moment the first data of the new slice reaches it.
With `T0` as the cycle of `slice_start`:

| cycle | event |
|---|---|
| `T0` | banks start their reads; network shadows move to a staged copy |
| `T0+1` | X, W, PIN and PPIN networks switch to the staged routes |
| `T0+2` | pods pop their task; post-processors switch operation |
| `T0+3` | first rows reach the pods and post-processors |
| `T0+PP_D` = `T0+5` | PPACT/PPPSUM switch two cycles earlier; first post-processor result reaches its bank |
| `T0+POD_D` = `T0+11` | POUT switches two cycles earlier; first pod result reaches its psum bank |

`POD_D = BANK_RD_LAT + NET_LAT + PIPE + NET_LAT = 2 + 1 + 7 + 1`. All of these
latencies are derived in `sosa_pkg` from the parameters.

A write command waits for its *arm* pulse (`T0+POD_D` or `T0+PP_D`). It then
stores each valid row arriving from its writer at consecutive addresses.

A schedule must respect the following. `sosa_top` checks the first at
elaboration; breaking the others is flagged at run time.

- `SLICE >= R` and `SLICE >= POD_D`, so back-to-back slices do not overlap.
- A bank is either read or written in a given cycle. If both happen, the cycle
  goes to the write, `bank_clash` sets and an assertion reports it.
- The routes of one slice do not need a switch output set two ways. If they
  do, `net_conflict[net]` sets and an assertion reports it.
- Pod results land in cycles `T0+POD_D .. T0+POD_D+R-1`. At full size that
  is `T0+11 .. T0+42`, ten cycles into the next slice. Post-processor results
  land until `T0+36`, four cycles into it. So a bank written in slice n must
  not be read in slice n+1, and a tile that consumes those results runs in
  slice n+2 or later.
  - This is a cost of the pipeline latency. The publication's example
    schedule chains dependent tiles in consecutive slices.
  - At the reduced size of the end-to-end test (R = 4, SLICE = 16), the
    writes end inside their own slice, and slice n+1 is enough.
- A convolution tile reads `R + KW - 1` rows, one or three more than a slice
  holds. That bank must stay idle at the start of the next slice.

If a slice's instructions take more than `SLICE` cycles to issue, that slice
starts late. Every unit simply waits, and `n_stretched` counts these slices.
At full scale this is the main bottleneck of this implementation: one busy
pod needs about ten instructions per slice (reads, writes, routes, task), so
a slice that keeps all 256 pods busy takes far longer to issue than 32
cycles. A wider control bus, or per-pod instruction streams, would remove it.
The publication does not say how wide its issue is.

## The Butterfly-2 networks

`butterfly_network` is built from K = 2 copies of an N x N butterfly, each
with log2 N stages of 2 x 2 switches:

- Every source feeds input `s` of both copies.
- Copy `m` serves destinations `m*N/K .. (m+1)*N/K - 1`.
- Destination `d` owns the K adjacent outputs `(d mod N/K)*K + e` of its
  copy, for link `e = 0..K-1`.

So a destination can be reached over K different paths. This is the extra
routing freedom the expansion buys; the publication finds that it reaches the
busy-pod rate of a crossbar.

Each switch output picks one of its two inputs. A switch can therefore pass,
cross or broadcast, and multicast comes for free: one bank can feed several
pods in the same slice.

A `ROUTE` instruction sets the log2 N switch outputs on the path from `s` to
output `o`: after stage `k` the path is at position `{s[n-1:k+1], o[k:0]}`
and takes the input whose bit `k` equals `s[k]`. Routing is the scheduler's
job. A route that collides with an earlier route of the same slice is
flagged, not repaired.

Switches are combinational, and destination outputs are registered
(`NET_LAT = 1`).

## Banks and post-processors

`bank_ctrl` wraps one `sram_bank`, a plain single-port array with a
registered read (`BANK_RD_LAT = 2` from `slice_start` to the first row). It
runs one read burst and one write burst per slice. The host port has priority
and is meant for loading and unloading while the accelerator is idle.

Address generation inside the bank is this design's own; the publication
does not say where addresses come from.

`post_processor` is a pair of lanes, with a result one cycle after its input:

- `ACT` on any lane: `sat8(relu(a) >>> shift)`.
- `ADD` on the even lane: `a0 + a1`, written to a psum bank. This is the
  publication's tile aggregation in idle post-processor slots.
- `ADD_ACT` on the even lane: the activation of `a0 + a1`.

The activation function (ReLU, shift, saturate to int8) is this design's
choice; the publication only says an activation function is applied.

An activation result is 32 bytes: it is written as one activation row of the
next layer, which is why `R == C` is required.

## What the publication gives and what was decided here

Taken from the publication:

- the pod count, the array size, U and V, and the data widths;
- double-buffered weight-stationary PEs;
- multicast across rows and fan-in down columns;
- a pod built from array, converter, skew/deskew buffers, FSM and task queue;
- N single-ported banks per data type, 256 KB each;
- the Butterfly with expansion 2;
- fixed time slices of r cycles with a static schedule;
- post-processors working in pairs for tile aggregation.

Decided here:

- the instruction set and control bus;
- the shadow / staged / active switching of every unit and the slice timing
  above;
- broadcast weight loading;
- the 1-D converter;
- the activation function;
- the wiring inside the Butterfly switches;
- one one-way network per direction;
- the host port in place of the off-chip memory interface.

Not built:

- the DRAM/HBM interface and the host CPU (the host port stands in for them);
- the offline scheduler, which is software;
- the instruction *cache*: there is a host-loaded instruction memory instead,
  so programs longer than 1024 instructions are loaded in pieces.

**Capacity at default parameters.** Each bank group holds 256 x 256 KB =
64 MiB. Parameter counts below are general knowledge; the input sizes
(299x299x3, sequence length 100) are the publication's.

- Fit in the weight banks with int8 weights: ResNet50/101/152, Inception-v3,
  DenseNet121/169/201 and BERT-medium. The largest is ResNet152, at 60 MB.
- Do not fit: BERT-base (110 MB) and BERT-large (340 MB). Neither does
  ResNet152 together with BERT-medium for multi-tenancy. These would need the
  off-chip streaming that is not built.

## Simulating

The RTL is plain SystemVerilog 2017: one module or package per file in
`rtl/`, with `sosa_pkg.sv` first. With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/sosa_pkg.sv tb/tb_sosa_top.sv \
          --top-module tb_sosa_top -Mdir obj_top
obj_top/Vtb_sosa_top
```

Every testbench in `tb/` ends with
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.

| testbench | size | what it checks |
|---|---|---|
| `tb_sosa_pe` | full | MAC against reference, both weight registers |
| `tb_systolic_array` | 32 x 32, U = V = 16 | three back-to-back tiles, exact output cycle, reload during compute |
| `tb_skew_buffer` | 8 lanes | per-lane delays, forward and reverse |
| `tb_conv2gemm` | R = 32 | GEMM and KW = 1, 2, 4 windows |
| `tb_task_queue` | 4 entries | FIFO order, full/empty, random push/pop |
| `tb_pod_fsm` | R = 4 | load / compute sequencing, register selection |
| `tb_systolic_pod` | 32 x 32 | five slices: load, compute with psums, conv KW = 2, idle, reuse of weights; exact latency |
| `tb_butterfly_network` | N = 16, K = 2 | random permutations and multicast against a path model, second link, conflict flag, shadow / swap timing |
| `tb_sram_bank`, `tb_instr_mem` | small | read / write against a reference array |
| `tb_bank_ctrl` | 64 rows, R = 4 | read burst timing, armed writes with gaps, wrong-writer rejection, host port, clash |
| `tb_post_processor` | C = 8 | ACT, ADD, ADD_ACT; staging at slice_start and switch at slice_go |
| `tb_main_controller` | SLICE = 8 | instruction order and slice tags, slice spacing, stretched slices, drain and done |
| `tb_sosa_top` | N = 4 pods of 4 x 4, U = V = 2 | two-layer program (below) |

`tb_sosa_top` builds its program the way the offline scheduler would,
including a small router that moves a route to the second Butterfly link when
the first is blocked. The program covers:

- weight loading, including a load during a compute;
- multicast of one activation bank to two pods;
- a bias read as input psums;
- psum chaining from one pod to another through a bank;
- ADD_ACT, ACT and ADD on the post-processors;
- a second layer that consumes the activations the post-processors wrote;
- a convolution tile;
- a stretched slice, a route conflict and a bank clash.

Every result row is read back through the host port and compared. The test
counts each of these mechanisms from the design's own signals, and fails if
any count is zero.

The largest top-level configuration simulated is N = 4 pods of 4 x 4. Pods
and arrays were simulated separately at the full 32 x 32 size with
U = V = 16. The full 256-pod chip was not simulated: its 262,144 PEs are well
beyond what a cycle-based simulator builds in reasonable time and memory.
Linting the full chip with Verilator takes about 12 GB of memory.
