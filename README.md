# VectorMesh: a tile-processor mesh that shares operands instead of copying them

Dense DNN accelerators lose much of their DRAM bandwidth and on-chip SRAM to
duplication: the same input tile gets fetched into several local buffers so
that several groups of PEs can use it. VectorMesh (Lin, Chen, Yang and Chien,
"A Dense Tensor Accelerator with Data Exchange Mesh for DNN and Vision
Workloads") uses small tile processors, the *Tile Execution Units* (TEUs), and
joins neighbouring TEUs with short bidirectional FIFOs. A tile is loaded into one
TEU only. That TEU uses each operand vector it reads and also pushes it into a
FIFO, so the TEUs next to it can use the same vector a cycle or so later. With
32 PEs fed by one pass of a butterfly network every cycle, the TEUs run at the
same rate, and a four-entry FIFO is enough to absorb the skew between them.

This repository holds synthesizable SystemVerilog for that architecture: the
TEU with its buffers, butterfly network, PE group and sequencer, the mesh FIFO,
and the mesh itself. It also has self-checking testbenches. The DRAM and the
small global buffer in front of it are not included. The mesh exposes one load
port and one drain port per TEU where they would attach.

```
        col 0            col 1                      inside one TEU
      +-------+  H   +-------+                 ld (row of 32 words)
row 0 |  TEU  |<====>|  TEU  | ...        +---------------+--------------+
      +-------+ FIFO +-------+            | input buffer 0|input buffer 1|
          ^ V            ^                | 32 x 256 B    | 32 x 256 B   |
          v FIFO         v                |  + butterfly  |  + butterfly |
      +-------+      +-------+            +-------+-------+------+-------+
row 1 |  TEU  |<====>|  TEU  | ...   N/S FIFO <-> op0     op1 <-> W/E FIFO
      +-------+      +-------+                    \      /
          .              .                    PE group: 32 x MAC
                                              PSum: 2 SRAMs x 2.5 KB ---> dr (drain)
```

## Sizes

| item | value | origin |
|---|---|---|
| TEUs | 4 x 4 (`ROWS`, `COLS`), 2 x 2 also tested | published 512-PE and 128-PE configurations |
| PEs (MAC lanes) per TEU | 32 | published |
| input buffers per TEU | 2, each 32 banks x 256 B = 8 KB | published |
| PSum buffer per TEU | 2 SRAMs, 5 KB together | published |
| mesh FIFO | 4 entries of one 32-word vector | published |
| operand word | 16-bit signed | this design |
| PSum word | 32-bit signed, wraps | this design |
| bank depth | 128 words; buffer address 12 bits (row 7, bank 5) | follows from the above |
| PSum rows | 20 rows of 32 PSums per SRAM | follows from the above |

Everything shared lives in `rtl/vm_pkg.sv`. It holds these constants, the
vector types `vec_t` (32 x 16 bit) and `pvec_t` (32 x 32 bit), and the job
record `teucfg_t`.

## Reading one vector per cycle from 32 banks

This is the part that makes the rest work. Each cycle, every one of the 32
lanes needs one word from an input buffer, and a buffer is 32 single-ported
banks. Word address `A` lives in bank `A mod 32`, row `A / 32`. The lane
addresses are formed by `vm_agu` as

```
A_N = A_0 + sum_{i=0..4} 2^i * o_i * N_i        (N_i = bit i of the lane number)
```

`A_0` comes from the sequencer and moves every step. The five offsets `o_i`
describe the tile's layout and stay fixed for a job. If every `o_i` is odd, the
32 addresses land in 32 different banks. If some `o_i` are zero, lanes that
differ only in those bits read the *same* word (a multicast). Either way the
access needs one row per bank, and the butterfly network (`vm_bfn`) can deliver
it in a single pass.

Why it works. The network has five stages of 2:1 selectors. Stage `k` lets a
value move between positions that differ in bit `k`, starting from bit 0.
Lane `N`'s word comes from bank `s = src[N]`. After stage `k` it sits at the
position whose bits `0..k` are those of `N` and whose bits above `k` are those
of `s`. Two lanes `N` and `M` can only fight over a selector if they agree in
bits `0..k` and their source banks agree above bit `k`. For two lanes that
agree in bits `0..k`, the difference of their addresses is a sum of terms
`2^i o_i (N_i - M_i)` with `i > k`. If the lowest such term has an odd `o_i`,
the two source banks differ in that bit, which is above `k`, so they never meet.
If all such terms have `o_i = 0`, they read the same word and can share the
path. So no access of this form is ever blocked.

How a layout is chosen. A GEMM tile with 4 rows x 8 columns of outputs on the
32 lanes uses lane bits 0-2 for the column and bits 3-4 for the row. `B(k, j)` is
stored at `8k + j` with `o = {1,1,1,0,0}`: the eight columns read eight banks,
and the four rows share them. `A(i, k)` is stored at `64k + 8i` with
`o = {0,0,0,1,1}`. A convolution puts output channels and output columns on the
lanes in the same way. Layers with stride > 1, or other awkward shapes, need
their data padded or shuffled when it is written into the buffer, so that the
lane offsets become odd or zero again. That is the loader's job; the RTL does
not do it.

When the rule is broken. `vm_input_buffer` still returns the right words, but
in several passes. In each pass it walks the waiting lanes from lane 0 upwards
and takes each lane that does not clash with a lane already taken. Two lanes
clash when they want different rows of one bank, or when their butterfly paths
need one selector with different sources. The lowest waiting lane is always
taken, so a read ends after at most 32 passes. Lanes that read the same word
never clash, so multicast costs nothing. While passes remain, `busy` is high
and the words already read are kept in a capture register. `multi` marks data
that took more than one pass. The TEU holds its step until neither buffer is
busy: that is its stall, and its `conflict` output counts such steps.
Neighbours see the stall through the FIFOs: they wait for a vector or for
space. There is no global stall wire. A form-conforming access always takes
one pass, and the butterfly's own `blocked` check is asserted never to fire.

Write side: the load port writes one row, one word into each of the 32 banks
at the same row, in one cycle.

## One TEU, cycle by cycle

`vm_teu` is a short pipeline:

1. **Issue / read.** `vm_teu_ctrl` offers a step: a base address per operand,
   a PSum row and a `first` flag. `vm_agu` expands each base into 32 lane
   addresses. If an operand is local, its buffer is read.
2. **Operand / exchange.** The two operand vectors are now present. Each is
   either the buffer output or the head of one neighbour FIFO. The step *fires*
   when every FIFO it pops has data and every FIFO it pushes has room. On firing
   it pops, pushes its operand on if the job says so, and hands both vectors to
   the PE group. If it cannot fire, it waits (`stall`) and so does stage 1. The
   buffer read registers hold their data while it waits.
3. **MAC.** `vm_peg` reads the PSum row, then in the next cycle adds
   `a[N] * b[N]` to each of the 32 PSums (or starts from zero when `first`) and
   writes the row back. When consecutive steps use the same row (the usual case,
   since the temporal loop is innermost), the row just written is forwarded from
   a register instead of being read from the SRAM (`bypass`).

With no waiting, one step fires per cycle. A job of S steps keeps `busy` high
for S + 3 cycles from the cycle after `start`.

Operand 0 (input buffer 0) travels on the vertical FIFOs, operand 1 (input
buffer 1) on the horizontal ones. On the per-side ports the side index is
0 = north, 1 = south, 2 = west, 3 = east.

## Sharing through the mesh FIFOs

`vm_mesh_fifo` is one storage of four 32-word entries between two neighbours,
A (west or north) and B (east or south). Its `dir` input says which way it
flows. The mesh derives `dir` from the two TEUs' jobs: a FIFO flows towards A
when B forwards towards A, or when A takes its operand from B. The direction
may only change while the FIFO is empty; an assertion checks this. The FIFO's
`ready` means "not full" and its `valid` means "not empty", and neither depends
on the other side in the same cycle. Long chains of TEUs therefore have no
combinational path through them.

Each operand of a job has two settings:

* `src`: `SRC_LOCAL` (own buffer), `SRC_NEG` (north / west FIFO) or `SRC_POS`
  (south / east FIFO);
* `fwd`: `FWD_NONE`, `FWD_NEG` or `FWD_POS`, the FIFO the vector is pushed into
  after use. A vector taken from a FIFO can be passed on, so one tile can feed a
  whole row or column of TEUs.

Example, the blocked product `[P Q; R S] = [E F; G H] [W X; Y Z]` on 2 x 2
TEUs, each block loaded into exactly one TEU (TEU0: W, E; TEU1: X, F;
TEU2: Y, G; TEU3: Z, H):

| phase | TEU0 | TEU1 | TEU2 | TEU3 |
|---|---|---|---|---|
| 0 | P = E W; E east, W south | Q = E X; E from west, X south | R = G W; W from north, G east | S = G X; both from FIFOs |
| 1 | P += F Y; both from FIFOs | Q += F Z; F west, Z from south | R += H Y; Y north, H from east | S += H Z; H west, Z north |

In phase 1 every FIFO runs the other way. Because each TEU starts on its own
`start` pulse, the TEUs can be out of step. A TEU that is early waits on an empty
FIFO. A producer that is early fills the FIFO's four entries and then waits on a
full one. Once all TEUs run, each FIFO hop on a dependency chain adds one cycle
to the end time and nothing to the rate. A 4 x 4 mesh that streams A along the
rows and B down the columns ends after 2K + 3 + 6 cycles for K-deep 8 x 8
blocks.

There is no global stall signal. A TEU waits only on its own FIFOs, and the
wait reaches other TEUs through back-pressure.

## Jobs

A job (`teucfg_t`) is four nested loops, `i3` outermost:

```
for i3 < n3            // PSum row pbase + i3: one group of 32 parallel outputs
  for i2 < n2          // temporal loops, all accumulated into that row
    for i1 < n1        //   (e.g. input channel, kernel row, kernel column)
      for i0 < n0
        A_0(op) = base + i3*s3 + i2*s2 + i1*s1 + i0*s0       per operand
        first   = !accum && i2 == 0 && i1 == 0 && i0 == 0
```

The sequencer steps its addresses by adding strides, so it has no
multipliers. `accum = 1` continues the PSums of an earlier job, for example a
second phase of sharing, or input channels that did not fit in one job.
`acc_sel` picks the PSum SRAM that accumulates.

## PSum buffer and draining

The PSum buffer is two SRAMs, each 20 rows of 32 x 32-bit PSums. A job
accumulates into the one `acc_sel` names. The drain port (`dr_en`, `dr_sel`,
`dr_addr`) reads a row of either SRAM and returns it on `dr_data` one cycle
later. Draining the SRAM that is not accumulating can go on while a job runs,
so a finished tile leaves while the next is computed. Draining the SRAM that
is accumulating, in the same cycle as a step, is not allowed, and an assertion
checks it. The source architecture has two PSum SRAMs but does not say how they
are used; this ping-pong use is this design's own choice.

## Files

| file | contents |
|---|---|
| `rtl/vm_pkg.sv` | sizes, vector types, job record |
| `rtl/vm_sram.sv` | 1R1W synchronous SRAM, one-cycle read, output held without `re` |
| `rtl/vm_agu.sv` | lane address generator |
| `rtl/vm_bfn.sv` | 32-lane butterfly with routing and blocking check |
| `rtl/vm_input_buffer.sv` | 32 banks + butterfly + multi-pass conflicting reads + row write |
| `rtl/vm_mesh_fifo.sv` | bidirectional 4 x 32-word FIFO |
| `rtl/vm_peg.sv` | 32 MAC lanes, two PSum SRAMs, bypass, drain |
| `rtl/vm_teu_ctrl.sv` | four-loop sequencer |
| `rtl/vm_teu.sv` | the TEU |
| `rtl/vectormesh.sv` | the mesh (top) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the mesh tests |
| `tb/tb_vm_gemm_pkg.sv` | GEMM tile layout shared by the TEU and mesh tests |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends itself, and a
watchdog fails it if it hangs. With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/vm_pkg.sv tb/tb_vm_gemm_pkg.sv tb/tb_vectormesh.sv --top-module tb_vectormesh
./obj_dir/Vtb_vectormesh
```

* `tb_vm_sram`, `tb_vm_agu`, `tb_vm_bfn`, `tb_vm_input_buffer`,
  `tb_vm_mesh_fifo`, `tb_vm_peg`, `tb_vm_teu_ctrl` test the modules against
  independent models. They include random conflict-free access patterns,
  random conflicting reads and one-bank reads that take 32 passes, FIFO order and full/empty behaviour in both directions, and
  sequencer steps against a loop-nest model.
* `tb_vm_teu`: a local GEMM tile, with the cycle count checked (S + 3); a tile
  with one operand from a FIFO and the other forwarded, under random
  back-pressure; and a layout that puts the 8 words of each B row in one bank.
  That last tile must give the right PSums in exactly 8 passes a step.
* `tb_vm_workloads`: one TEU runs a 3 x 3 convolution tile (3 input channels,
  4 output channels x 8 output columns on the lanes, two output rows) and a
  correlation tile (8 channels, 4 x 3 displacements, two positions). The
  results are checked against direct loop-nest models.
* `tb_vectormesh`: the 2 x 2 example above, in three phases (the third
  accumulates into the other PSum SRAM while the first is drained), with
  skewed starts. It counts, and requires, transfers in all four directions,
  direction changes, stalls on empty and on full FIFOs, PSum bypasses and drains
  during accumulation. It also checks the end time of a synchronous start.
* `tb_vectormesh_full`: the default 4 x 4 mesh, with no parameter overridden,
  through one complete 32 x 32 GEMM. Each A block is streamed across its row and
  each B block down its column. Building it takes a few minutes.

Number formats and sizes are in `vm_pkg`. `ROWS`/`COLS` are parameters of
`vectormesh`. The testbenches compute their expected values from the package
constants, except the GEMM layout, which assumes 32 lanes.

## How far to trust it, and where it departs

Taken from the source architecture: the TEU's contents and sizes (two 32-bank
8 KB input buffers, 32 PEs, a two-SRAM 5 KB PSum buffer), a butterfly network
between buffers and PEs, the lane address form for one-cycle access,
four-entry 32-word bidirectional FIFOs in a 2D mesh, vertical FIFOs for one
buffer and horizontal ones for the other, PSums that stay in the TEU during the
temporal loop, and the 2 x 2 / 4 x 4 meshes.

This design's own choices: word widths; the selector form and routing of the
butterfly; the pipeline and its handshakes; the FIFO handshake and one shared
storage per FIFO; forwarding a popped vector; the four-loop job record; the
ping-pong PSum use; load and drain ports per TEU; no wrap-around links.

Departures:

* The published address form prints the weight as `2^X` and sums to `X`. Read
  literally, every lane would hit the same bank. This RTL uses `2^i` over
  `i = 0..4`, and it also allows `o_i = 0` for multicast, which shared-operand
  tiles need.
* The stall on a conflicting access is local to the TEU and reaches the
  others only through the FIFOs (see above). The pass rule is this design's.
* The published 2 x 2 sharing figure labels two outputs `GW+FY` and `GX+FZ`.
  The block algebra gives `GW+HY` and `GX+HZ`, which is what the test uses.
* The second sharing phase (FIFOs reversed) is this design's schedule; only the
  first phase is drawn in the source.
* No global buffer, DRAM controller or host interface. Jobs are given as a
  packed record on a port and data through raw row-write and row-read ports.
  The source gives the global buffer's size (2 KB) but nothing of how it works.

Not verified: synthesis timing or area. The pass rule is a long chain of
logic: lane n depends on lanes 0..n-1. Full network layers are not verified
either. Only the GEMM, convolution and correlation tiles of the testbenches
are simulated; larger layers are argued from the same tiling.
