# Pipelined layered QC-LDPC decoder with a loadable update schedule

Layered belief-propagation decoding updates the check rows of an LDPC code one layer at
a time, and every layer immediately uses the soft outputs (SO, the running a-posteriori
LLRs) that the layers before it produced. In hardware this is pipelined: while the
columns of the current layer are being read, the columns of the previous layer are still
travelling through the check-node arithmetic and are written back a few cycles later.
When the current layer needs a column that the previous layer has not written back yet,
the decoder must wait. Those wasted *idle cycles* depend only on the order in which the
layers are visited (the *scheduling sequence*) and on the order in which each layer reads
and writes its columns.

This RTL is a decoder built around that observation. It decodes quasi-cyclic (QC) LDPC
codes of up to 46 layers, 68 block columns and lifting size 384 (the size of the 5G NR
base graph 1 code with K = 8448), processing one block column of Z = 384 lanes per
clock. The scheduling sequence and the read/write orders are not fixed in hardware: the
host loads them, so a sequence found offline, for instance by a travelling-salesman
search that minimises idle cycles while keeping low-degree layers first, can be used
directly, and the decoder reports how many idle cycles it actually spent.

The design follows the pipelined layered architecture and idle-cycle model of
"High Throughput QC-LDPC Decoder With Optimized Schedule Policy in Layered Decoding"
(Chang, Peng, Wang, Yan). That work is mainly about finding the sequence; the decoder it
assumes is described there only by its timing and the belief-propagation equations.
Everything below that is not timing or the BP rule, such as word lengths, the check-node
arithmetic, the memory organisation and the host interface, is this design's own choice
and is marked as such.

## The pipeline and where idle cycles come from

Per clock, the decoder reads one block column of the current layer and, in the same
cycle, may write back one block column of an earlier layer:

```
cycle          R-5 R-4 R-3 R-2 R-1  R  |R+1 ...       R+t  R+t+1 ...
read  layer L   a   b   c   d   e   f  |          layer L+1 reads ...
write layer L                          |                a'    b'  ...
                                        <---- t ---->
```

* A layer whose last column is read in cycle R writes its first column back in cycle
  R + t, and the remaining columns follow one per cycle. t is the SO data path latency.
* A column may be read in the cycle after its write-back, not in the same cycle: the SO
  memory returns the old word on a same-cycle read and write.
* If layer L+1 (degree d) shares c columns with layer L, reads them last, and layer L
  writes them first and in the same order, then layer L+1 must wait

      w(L -> L+1) = max(t - (d - c), 0)

  idle cycles, and one iteration of a scheduling sequence c1 .. cm costs
  n_idle = sum of w over consecutive pairs, including the wrap from cm to c1.

The hardware does not compute w. It keeps a *pending* bit per block column, set when
the column is read and cleared when it is written back, and simply does not read a
pending column. When the two layers share at least one column, this gives exactly w
idle cycles in the situation above. It also stays
correct where the formula's assumptions fail, for example when a column is shared with
a layer two steps back (long t, short layers), or when a short layer follows a long one
and its write-back has to queue behind the longer layer. The testbenches check the
formula cycle-exactly where it applies: every idle cycle, and the total decode time
`iterations * edges + idle + t + degree of the last layer`.

The scoreboard and the formula part ways in two directions:

* The formula charges max(t - d, 0) even to a pair of layers with **no** common column.
  The decoder does not wait there, since nothing it reads is pending. When t is larger
  than the smallest layer degree (t = 9 against degree-5 layers), the decoder can
  therefore spend fewer idle cycles than the formula predicts. A code in which every
  adjacent pair shares a column, as is typical for base graph 1, does not show this.
* The decoder writes back one column per cycle, in layer order. After a degree-19 layer,
  the write port is busy for 19 cycles. A short layer that follows it cannot write back
  until then, and the layers after that wait for those columns. This happens at the
  wrap from the last, densest layer of one iteration to the first layer of the next. The
  formula does not count these idle cycles; `idle_cycles` does.

The original timing diagram of the architecture (t = 3, layer 2 with 5 columns of which
2 are shared, one idle cycle) counts t one cycle differently from the closed-form
equation, which gives 0 idle cycles for that example. This design follows the equation,
so with the diagram's numbers it inserts no idle cycle. With t = 4 it inserts the
diagram's one idle cycle. The controller testbench checks both cases.

A second source of idle cycles exists only in this design. The check node unit holds at
most NBANK = 4 layers, counting the one being read and those waiting for write-back. With
a long t and very short layers a fifth layer can be due before the oldest has left; the
controller then also waits. These cycles are counted in `idle_cycles` as well, and
`stall_bank` flags them.

## Data path

```
           schedule_memory --> schedule_controller (pending bits, idle counter)
                                   | rd_col, rd_eaddr          ^ wr_col, bank_done
                                   v                           |
 llr load --> so_memory --rd--> cyclic_shifter --> v2c_unit --> check_node_unit
                  ^                 (rotate)      SO - C2V_old      |  (gather layer,
                  |                                   ^            |   phi rule,
                  +---- cyclic_shifter (rotate back) <------------+   write order)
                                                      |            |
                                  c2v_memory --rd-----+   <--wr----+
```

| module | role |
|---|---|
| `ldpc_pkg` | default sizes, fixed-point formats, struct types (`entry_t`, `layer_t`, `rd_tag_t`) |
| `schedule_memory` | scheduling sequence: one header per position, entries in read order with write order |
| `schedule_controller` | walks the sequence for n iterations, pending-bit scoreboard, idle cycles |
| `so_memory` | SO word (Z LLRs) per block column, 1 read + 1 write per cycle |
| `c2v_memory` | C2V word per circulant ("edge"), zeroed at start through valid bits |
| `cyclic_shifter` | rotation by the circulant shift modulo the run-time lifting size |
| `v2c_unit` | V2C = SO - old C2V, saturated |
| `phi_lut` | phi(x) = -ln tanh(x/2), 32-entry table |
| `check_node_unit` | per-layer banks, phi-domain check-node rule, SO update, timed write-back |
| `ldpc_decoder` | top level, host ports |

Every memory address is a block column or an edge; every data word is Z lanes wide.
The read and write-back of one block column each take one cycle.

## Check-node arithmetic

The BP check-node rule multiplies tanh(m/2) over the other incoming messages. With
phi(x) = -ln tanh(x/2), which is its own inverse, it becomes, per lane:

```
S      = sum over the layer's columns j of phi(|V2C_j|)      (accumulated as they arrive)
P      = xor of the sign bits of V2C_j
|C2V_k| = phi( S - phi(|V2C_k|) ),   sign(C2V_k) = P xor sign(V2C_k)
SO_k    = sat(V2C_k + C2V_k)
```

There is no min-sum approximation; the only loss is quantisation. Formats (this
design's choice): LLRs and SO values are 8-bit signed with 2 fractional bits, saturated
to +-127 (+-31.75); C2V messages are 6-bit signed; the phi table takes and returns 5-bit
magnitudes in quarter units, entry i = round(4 * phi(i / 4)) saturated at 31 (phi(0) is
infinite). The per-lane sum S is 10 bits wide. These quarter-unit steps are coarse. They
are enough to decode (the end-to-end test corrects noisy words completely), but anyone
who wants to reproduce error-rate curves should widen `QMAG`/`QSO` and regenerate the
table from the formula above.

The check node unit stores all V2C messages of a layer (up to DMAX = 19 columns x Z lanes)
in one of NBANK banks, so it can produce the outputs in any order. That is what lets the
write order differ from the read order.

## Loading a schedule

The host writes two tables through `cfg_*` while the decoder is idle:

* header `p` (cfg_hdr = 1, address p): `{start[8:0], deg[4:0]}` packed as `layer_t`:
  the layer at position p of the scheduling sequence has `deg` entries starting at
  entry `start`;
* entry `e` (cfg_hdr = 0, address e): `{col[6:0], shift[8:0], wr_k[4:0]}` packed as
  `entry_t`. Entries of a position are stored in *read order*; `wr_k` of the entry at
  offset j says which read slot is written back j-th. The entry address is also the
  C2V memory address of that circulant.

A layer that appears at several positions needs separate entries for each. Within one
iteration each layer of the code appears once, so the number of entries equals the
number of circulants.

The orders that make the idle-cycle formula hold are:

* read order of position p: first the columns *not* shared with position p-1, then the
  shared ones;
* write order of position p: first the columns shared with position p+1, then the rest;
* shared columns in the same relative order on both sides (the testbenches sort them by
  column index). Positions wrap around: position 0 follows position m-1.

The sequence itself is the host's choice. The search this decoder was built for sets up a
complete directed graph with one node per layer and edge weight w(i -> j) from above, and
solves an asymmetric travelling-salesman problem on it. To keep the decoding performance
of degree-ordered schedules, the layers are grouped by (degree, number of connections to
punctured columns). Edges that do not go to the same group or to the next group are
forbidden, and the edges from the last group back to the first carry a large extra weight.
The tour then visits the groups in ascending order once per iteration, and the search only
reorders the layers inside each group and picks the group boundaries to save idle cycles.
That search runs in software and is not part of this RTL. The testbench package contains
a small model of it, `schedule_search`, which builds these weights and improves a tour by
local search (moving one layer at a time). The testbenches use it to produce the
sequences they load.

## Top-level interface and timing (`ldpc_decoder`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `cfg_we`, `cfg_hdr`, `cfg_addr`, `cfg_wdata` | in | 1, 1, 9, 21 | schedule memory write |
| `llr_we`, `llr_col`, `llr_data` | in | 1, 7, Z*8 | channel LLRs, one block column per cycle, natural lane order, positive = bit 0 |
| `start` | in | 1 | one-cycle pulse while idle |
| `n_layers`, `n_iter` | in | 7, 8 | sequence length and iterations, captured at start |
| `z_size`, `t_lat` | in | 10, 5 | lifting size (1..Z) and SO path latency t (2..31), captured at start |
| `busy`, `done` | out | 1 | busy from the cycle after start; done is a one-cycle pulse at the end |
| `out_rd_en`, `out_rd_col` | in | 1, 7 | read back a block column while idle |
| `out_so`, `out_hard` | out | Z*8, Z | SO values and hard decisions (1 = negative LLR), the cycle after `out_rd_en` |
| `idle_cycles` | out | 32 | idle cycles of the current or last decode |
| `stall_conflict`, `stall_bank` | out | 1 | why the current cycle is idle |

Decode time from the start pulse to `done`, without bank stalls or write-back queueing,
is `n_iter * E + idle_cycles + t + d_last` cycles, where E is the number of entries in the
sequence and d_last the degree of its last position. The iteration count is fixed; there
is no syndrome check or early stop. Host loads and reads are ignored while busy.

A build with lane count Z serves any lifting size z <= Z: lanes z..Z-1 are carried along
but take no part in the code. Likewise t is a run-time value. The data path itself needs
two cycles from the last read to the first write-back, and a larger t only holds the
result back, so one build reproduces the t = 4 and the t = 9 pipelines of the schedule
study.

## Sizes and the evaluated codes

Default parameters: Z = 384, NCOL = 68, NLAYER = 46, EMAX = 316, DMAX = 19, NBANK = 4,
and t = 4 after reset. The block-column and layer numbers are those of 5G NR base graph 1,
taken from the standard, not from the schedule study.

| code | t | needs | fits |
|---|---|---|---|
| BG1, R = 1/3, K = 8448 | 4 and 9 | z = 384, 68 columns, 46 layers, 316 circulants, degree <= 19 | yes |
| BG1, R = 1/2, K = 2112 | 4 and 9 | z = 96, 46 columns, 24 layers, fewer circulants | yes (z_size = 96) |

The schedule study reports, per iteration, 6 and 4 idle cycles (t = 4) and 176 and 79
(t = 9) for its combined idle-and-performance sequences on these two codes. The BG1
shift table and the sequences themselves are not part of this RTL, so those numbers are
not reproduced here. With a sequence loaded, `idle_cycles` measures them. It will not
equal the formula exactly, for the reasons given in the pipeline section: write-back
queueing after the dense layers, and, with t = 9, pairs of layers without a common
column. With t = 9 and runs of very short layers, the 4-bank limit can also add idle
cycles that the formula does not count.

## Verification

Each module has a self-checking testbench in `tb/`. All of them print
`TB_RESULT checks=N failures=M`. `ldpc_tb_pkg` holds the reference model: phi evaluated
with real arithmetic, a sequential (non-pipelined) layered decoder with the same fixed-point
rules, the read/write order construction and the closed-form idle count.

* `tb_phi_lut`: every table entry against -ln tanh evaluated in real arithmetic.
* `tb_cyclic_shifter`: Z = 384 with z = 384, 96 and random sizes, plus Z = 13; forward
  and inverse.
* `tb_so_memory`, `tb_c2v_memory`, `tb_schedule_memory`: against model arrays, including
  same-cycle read/write, clear, and lock.
* `tb_v2c_unit`: the subtraction and its saturation.
* `tb_check_node_unit`: 60 layers of random messages and write orders. It checks every
  C2V and SO value and the exact write-back cycle for t = 2, 4 and 9, including layers
  that queue behind the previous one.
* `tb_schedule_controller`: a behavioural write-back. It checks that no pending column is
  ever read, and that idle cycles and latency equal the closed form on a code whose
  non-adjacent layers share no columns (t = 2, 5, 6). It also covers bank stalls.
* `tb_ldpc_decoder`: two reduced instances (Z = 16) decode regular, irregular and
  disjoint codes at t = 5 and t = 9, with z = 16 and z = 12. It compares every SO value
  and hard decision with the reference, checks the idle cycles and latency against the
  closed form, and counts that conflict stalls, bank stalls, write-back queueing,
  read/write overlap, SO saturation and multi-iteration decodes all happened.
* `tb_schedule_policies`: the default build decodes one BG1-sized stand-in code with
  three sequences:
  * ascending degree (LD);
  * the unconstrained least-idle tour ("idle");
  * the group-ordered least-idle tour ("idle&performance").

  It runs each at t = 4 and t = 9, for 2 iterations, and checks all SO values and the
  decode times. It also checks three properties of the sequences:
  * the constrained tour keeps the group order;
  * by the formula, the search never makes a sequence worse;
  * idle&performance needs no more idle cycles than LD.

  At t = 9 the decoder counted these idle cycles in 2 iterations:
  * LD: 188;
  * idle&performance: 126;
  * idle: 121.

  The formula gives 158, 139 and 138 per iteration. At t = 4 all three sequences need
  only the write-back queueing after the degree-19 layers (18 cycles).
* `tb_ldpc_decoder_full`: the default build (Z = 384, 68 columns, 46 layers) runs the
  four evaluated configurations with random stand-in codes of the same dimensions,
  scheduled in ascending-degree order, for 2 iterations each:
  * R = 1/3 (z = 384, 46 layers, 316 circulants) at t = 4 and at t = 9;
  * R = 1/2 (z = 96, 46 columns, 24 layers) at t = 4 and at t = 9.

  It compares every SO value with the reference and checks the decode time. It also
  checks that the idle cycles are at least what the formula charges to pairs of layers
  that share a column. It builds and runs in seconds. For one stand-in code the
  decoder measured, at t = 4 and t = 9:
  * R = 1/3: 18 and 183 idle cycles;
  * R = 1/2: 16 and 120 idle cycles.

To run one with plain Verilator (from the directory holding `rtl/` and `tb/`; the
package files come first):

```
RTL="rtl/ldpc_pkg.sv rtl/phi_lut.sv rtl/cyclic_shifter.sv rtl/so_memory.sv rtl/c2v_memory.sv \
     rtl/v2c_unit.sv rtl/check_node_unit.sv rtl/schedule_memory.sv rtl/schedule_controller.sv \
     rtl/ldpc_decoder.sv"
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb $RTL tb/ldpc_tb_pkg.sv \
    tb/tb_ldpc_decoder.sv --top-module tb_ldpc_decoder -Mdir obj
./obj/Vtb_ldpc_decoder
```

At reduced sizes Verilator warns that some address ports are wider than the arrays they
index (the field widths are fixed in `ldpc_pkg` for the full-size code); those warnings
are expected.
Replace the last file and the top module for the other testbenches.

## Departures and limits

* Timing convention: the closed-form idle-cycle equation is followed; the original
  timing diagram counts one more idle cycle for the same example (see above).
* The read/write orders and the sequence are computed by the host; the hardware only
  follows them. Other orders still decode correctly, because the pending bits stall as
  needed, but they cost more idle cycles.
* The check-node rule is exact BP in the phi domain with coarse quantisation; no
  min-sum, offset or scaling is used. No early termination.
* NBANK = 4 layers in flight, in-order write-back, and a one-bit-per-column scoreboard
  are this design's; they can add idle cycles beyond the formula in corner cases, and
  those cycles are counted.
* The memories are plain arrays (one read and one write port), not a specific SRAM macro.
  The write-back path (bank read, two phi lookups, adder, inverse rotation) is one
  combinational stage in front of the memories. A fast implementation would register it
  and raise the minimum t accordingly.
* The error-rate comparison of the scheduling policies (block error rate against SNR for
  both codes and both values of t) is a software result about the order of layer updates.
  Reproducing it needs the BG1 tables and the published sequences, and long simulation.
  The reference decoder in the testbench package has the decoder's arithmetic and could
  be used for such a study.
* The 5G NR shift tables, the filler/puncturing conventions and rate matching are outside
  this RTL: the host supplies the base-graph description and the LLRs of the transmitted
  and punctured (zero-LLR) columns.
