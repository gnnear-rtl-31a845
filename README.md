# GNNear in SystemVerilog

Training a graph neural network on a whole graph alternates two very
different kinds of work. **Reduce** (aggregation) collects the feature
vectors of each vertex's neighbours, usually as a weighted sum. It reads far
more memory than it computes. **Update** (combination) multiplies the
aggregated vectors by small weight matrices and applies element-wise
functions. That part is dense compute.

GNNear splits the two between a central chip and the memory.

- A **Near-Memory Engine (NME)** sits in the buffer chip of every LRDIMM. It
  does Reduce next to the DRAM: it loads a source vector from its own ranks,
  multiplies it by the edge weight, and adds it to a destination's partial sum
  kept in a local buffer.
- The **Centralized Acceleration Engine (CAE)** does Update with a systolic
  GEMM engine and a vector unit. It also drives all the NMEs through its
  memory controllers, merges their partial sums, and writes results back.

No handshake is needed between the CAE and the NMEs. Every NME instruction
has a fixed, known latency, so the CAE memory controller schedules each
instruction by counting cycles, the same way an ordinary DDR controller
schedules ACT and RD.

This repository holds synthesizable RTL for the NME, for the CAE's memory
controller, result FIFOs and window buffer, and for the GEMM engine, VPU and
scratchpad. It also holds a top level that ties 4 channels × 4 DIMMs to one
CAE, and self-checking testbenches for every block and for the whole design.

## The system at its default size

| Part | Default | Module |
|---|---|---|
| Channels × DIMMs per channel × ranks per DIMM | 4 × 4 × 2, DDR4-2400 timing | `gnnear_top` |
| NME execution unit | 16 PEs × 8 BF16 MACs (256 B of a vector per cycle) | `nme_exec_unit`, `nme_pe` |
| NME data buffer | 256 KB, one read and one write port | `nme_data_buffer` |
| NME instruction register | 8 instructions | `nme_inst_register` |
| Window | 4 intervals in flight, shard of 128 destinations | `cae_nmp_mc`, `cae_window_buffer` |
| Result FIFO | 64 entries per DIMM | `cae_result_fifo` |
| GEMM engine | 128 × 128 systolic array, weight stationary | `cae_gemm` |
| VPU | 32 cores × 16 lanes, BF16 | `cae_vpu` |
| Scratchpad | 16 MB, 8 banks, 2 ports, 64 B words | `cae_scratchpad`, `cae_spm_bank` |

All arithmetic is BF16. Shared types, constants, the instruction formats and
the BF16 helpers are in `rtl/gnnear_pkg.sv`.

## Shards, intervals and the instruction stream

The graph is cut into **intervals** of `SHARD` (128) consecutive destination
vertices. Within an interval, a DIMM processes the source vertices it holds
one at a time; this is its **shard**. For one source vertex u, the stream
holds:

1. one **L-type** that loads X_u from DRAM into the NME;
2. one **C-type** per out-edge (u, v) in the interval, computing
   `Y'_v += w(u,v) · X_u`.

When a DIMM has done all its sources for an interval, one **R-type** per
destination it touched streams that destination's partial sum out to the
CAE. The R-type also clears the slot. An end-of-interval marker, seen only by
the CAE, follows the R-types. A DIMM with no edges in an interval sends only
the marker.

### Instruction formats (56 bits)

| Type | [55:54] | [53:50] | Fields below | [9:0] |
|---|---|---|---|---|
| L (load) | `00` | DIMM | Daddr [49:10] | Vector_Size (bytes) |
| R (read out) | `01` | DIMM | reserved [49:18], Dst_Index [17:10] | Vector_Size |
| C (compute) | `10` | DIMM | Op [49:48], Edge_W [47:32] (BF16), reserved [31:18], Dst_Index [17:10] | Vector_Size |
| B (broadcast) | `11` | reserved [53:10] | | Vector_Size |

Op codes: mean = 0, sum = 1, weighted sum = 2. Code 3 is reserved; an NME
drops an instruction that uses it and counts it in `cnt_dropped`. Sum
multiplies by 1.0. Mean multiplies by Edge_W, which must hold the
normalisation factor. Dst_Index is the destination's position within its
interval (0..SHARD−1).

On the channel an instruction is a command of its own, `CMD_NMP`, on the
command/address bus (`ch_ca_t` in the package). Every NME sees every
instruction. An NME executes only those whose DIMM field equals its
`my_dimm` input; B-types go to all of them.

### Where a vector lives

An L-type address (Daddr) is split as follows:

| Bits | Field |
|---|---|
| [7:0] | byte in the column |
| [8] | rank |
| [11:9] | row, low bits |
| [13:12] | column, high bits |
| [17:14] | bank |
| [19:18] | channel |
| [23:20] | DIMM |
| [39:24] | row, high bits |

A 512-byte vector therefore has bytes 0–255 in rank 0 and bytes 256–511 in
rank 1, at the same bank, row and column. Both ranks are read in parallel,
each with four 64-byte bursts. The largest vector one L-type can load is
512 bytes, which is 256 BF16 values. That matches the hidden size of 256.

## Inside the Near-Memory Engine (`nme`)

`nme` contains:

- the instruction register;
- the decoder;
- the controller;
- the execution unit;
- the data buffer;
- one command arbiter per rank.

The rank interfaces (`rank_ca`, `rank_wdata`, `rank_rvalid`, `rank_rdata`) are
ports, because the DRAM chips are not part of the RTL.

**Controller (`nme_controller`).** It takes instructions in order.

- **L-type.** One small sequencer per rank issues PRE and ACT if needed, then
  one RD per 64-byte burst, tBL apart. It uses an open-page policy and tracks
  which row is open in each bank. Measured latencies for a 512 B vector are
  32 cycles for a row hit, 49 for a closed bank, and 66 for a row conflict.
  These stay within the bounds tCL + n·tBL (hit) and tRC + tRCD + tCL + n·tBL
  (miss).
- **C-type.** For each 256-byte pass it reads the destination's partial sum
  from the data buffer, sends it through the execution unit with the source
  slice and the edge weight, and writes the result back. One C-type takes
  ceil(size/256) + 3 cycles.
- **R-type.** Reads the slot out in 64-byte beats on the channel data bus and
  clears it in the same pass.
- **B-type.** Marks the next write of Vector_Size bytes (up to the next
  precharge) as a broadcast. The DIMM field of those ACT/WR/PRE commands is
  then ignored, so every DIMM on the channel stores the same data with one
  bus transfer. The CAE uses this to update the copies of high-degree
  vertices kept in several DIMMs.
- **Bypass.** Plain DDR commands addressed to this DIMM pass straight to the
  ranks. The CAE's write-back uses this path.
- **Load/compute overlap.** There are two source slots, used in turn. The
  L-type of the next source can therefore run while the C-types of the
  current one still compute. A C-type waits only for its own load.

After reset the controller clears the data buffer, one row per cycle, and
raises `init_done`. The top holds the CAE streams until every NME has
finished.

**Execution unit (`nme_exec_unit`, `nme_pe`).** Each PE has eight BF16
multiply-adds that share one broadcast edge weight:
`y = psum + w · x`. The result is registered, so the latency is one cycle.

**Data buffer (`nme_data_buffer`).** 256 KB, in 1024 rows of 256 B. One row
is 16 words of 16 B, one word per PE. Destination k owns rows 4k..4k+3, which
is 1 KB. Reads take one cycle.

**Arbiter (`nme_arbiter`).** On each rank, a host (bypassed) command wins
over the controller's command, which waits. With a correct CAE schedule the
two never collide.

## The CAE memory controller (`cae_nmp_mc`)

There is one controller per channel. It takes one instruction stream per
DIMM (`s_valid` / `s_entry` / `s_ready`). Each entry is an instruction plus
its interval number, or an end-of-interval marker. It issues at most one
instruction per cycle, round-robin over the DIMMs whose head instruction may
go now.

The controller never looks at the NMEs' state. Instead it keeps a timing
model of each NME:

- when the load engine is free;
- when the compute engine is free;
- for each source slot, when its load completes and when its last C-type
  finishes with it;
- when the channel data bus is free for an R-type readout.

An instruction issues only when the model says the NME can take it. The NME
testbench checks the model against the real engine. The model assumes a row
miss for every load, which is the upper bound.

Three more rules gate issue:

- **Window.** An entry whose interval is `WINDOW` or more ahead of `win_base`
  (the oldest interval not yet committed) waits. Such cycles are counted in
  `cnt_window_stall`.
- **FIFO credit.** An R-type issues only if the DIMM's result FIFO has room
  for all beats already in flight, plus its own, plus one for the marker. An
  end-of-interval marker needs one free entry and no beats in flight.
- **Read tags.** A small queue records which DIMM each returning beat
  belongs to. The beats are pushed into that DIMM's FIFO, tagged with
  interval, Dst_Index and beat number.

**Write-back** is a valid/ready request: DIMM, address, 64 B of data, and a
broadcast flag. The controller waits until every modelled NME engine is
idle. It then issues:

1. a B-type, for a broadcast;
2. PRE, then ACT, then WR after tRCD;
3. PRE after tCWL + tBL + tWR.

## Result FIFOs and the window buffer

This is the least obvious part of the design.

Intervals do not end at the same time on different DIMMs, because the graph
is irregular. If every DIMM had to finish interval i before any started
i+1, the fastest DIMMs would idle most of the time. So each DIMM may run up
to `WINDOW` intervals ahead of the oldest unfinished one. Partial sums of
several intervals are therefore in flight at once.

**Result FIFOs (`cae_result_fifo`).** There is one first-word-fall-through
FIFO per DIMM. Its `free` count is the credit the memory controller checks.
An assertion fires on an overflow.

**Window buffer (`cae_window_buffer`).** It holds `WINDOW` regions, one per
interval in flight. Each region has `SHARD × BEATS` words of 64 bytes, one
per (destination, beat). Each word also has a valid bit, and a clear valid
bit reads as zero, so a region never needs clearing.

- **Merge.** The buffer picks a non-empty FIFO round-robin. It reads the word
  at `(interval mod WINDOW, dst, beat)`, adds the beat's 32 BF16 lanes, and
  writes the sum back. That is two cycles per beat. A beat whose interval is
  not the oldest counts as an out-of-order merge.
- **End of interval.** A marker from DIMM d for interval i sets
  `done[i mod WINDOW][d]`.
- **Commit.** Once every DIMM has finished the oldest interval, the buffer
  streams that region out on `c_valid` / `c_ready`, in (dst, beat) order.
  Words no DIMM wrote are skipped. It then frees the region and increments
  `win_base`. The memory controllers watch `win_base` to open the window
  further.

An assertion checks that no beat arrives for an interval outside the window.
The buffer takes `WINDOW × SHARD × 512 B` = 256 KB at the defaults.

In the top, committed words go to scratchpad port A at
`res_base + (interval · SHARD + dst) · BEATS + beat`, wrapping over the
scratchpad.

## Update engines

**GEMM (`cae_gemm`).** A weight-stationary systolic array of ROWS × COLS
BF16 multiply-add cells.

- **Loading weights.** `w_load` loads one row of W per cycle. An assertion
  checks that no load happens while a vector is in flight.
- **Multiplying.** One activation vector per cycle enters on `a_vec`. Row i
  is delayed by i cycles on the way in, and column j by COLS−1−j on the way
  out, so `y_vec = a_vec × W` comes out whole on `y_valid`. That is exactly
  ROWS + COLS cycles after `a_valid`, which the testbench checks.

**VPU (`cae_vpu`).** CORES × LANES BF16 lanes in lock-step, with a registered
result after one cycle. Operations:

| Op | Result |
|---|---|
| `VOP_ADD` | a + b |
| `VOP_MUL` | a · b |
| `VOP_FMA` | a · b + c |
| `VOP_AXPY` | s · a + b |
| `VOP_RELU` | max(a, 0) |
| `VOP_DRELU` | b where a > 0, else 0 |
| `VOP_SCALE` | s · a |

**Scratchpad (`cae_scratchpad`, `cae_spm_bank`).**

- 8 true dual-port banks of 64-byte words.
- Words are interleaved over the banks by their low address bits.
- Reads take one cycle.
- If both ports write the same word in the same cycle, port A wins.

**BF16 arithmetic.** It is the same everywhere: products and sums are
truncated (rounded toward zero), and denormals are flushed to zero. The
functions are in `gnnear_pkg`.

## Top level (`gnnear_top`)

For every channel the top has:

- one memory controller;
- `DIMMS` NMEs;
- one result FIFO per DIMM.

The channel's read data is the OR of the DIMM outputs, and an assertion
checks that at most one DIMM drives it. All FIFOs feed one window buffer,
whose commits write into the scratchpad.

The control core, which would build the instruction streams and sequence
Update, is not part of this RTL. Its connections are top-level ports:

- the streams;
- the write-back requests;
- scratchpad port B;
- the GEMM and VPU operands and results.

The rank interfaces of all 32 ranks are also ports. The top adds up each
NME event counter over all NMEs and brings the sums out.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself; a
watchdog ends it with a failure if it hangs. With Verilator 5:

```sh
verilator --binary --timing --assert -y rtl -y tb \
    rtl/gnnear_pkg.sv tb/tb_util_pkg.sv tb/tb_nme.sv --top-module tb_nme
./obj_dir/Vtb_nme
```

Replace `tb_nme` with any testbench name. Verilator prints width and
unused-signal warnings; add `-Wno-fatal` to keep them from stopping the
build.

| Testbench | What it exercises |
|---|---|
| `tb_nme_pe`, `tb_nme_exec_unit` | BF16 MACs against a reference model, all three reduction ops |
| `tb_nme_data_buffer`, `tb_nme_inst_register`, `tb_nme_inst_decoder`, `tb_nme_arbiter` | storage, ordering and full flag, all four formats and the DIMM check, priority |
| `tb_nme_controller` | load latencies for a hit, a closed bank and a conflict; overlap; broadcast; bypass; results against DRAM content |
| `tb_nme` | two NMEs on one channel driven only over the command bus |
| `tb_cae_nmp_mc` | the controller with two real NMEs; window, credits and write-back; DRAM timing checked |
| `tb_cae_result_fifo`, `tb_cae_window_buffer` | back-pressure, out-of-order merge and in-order commit |
| `tb_cae_gemm`, `tb_cae_vpu`, `tb_cae_scratchpad` | exact results, GEMM latency, port collisions |
| `tb_gnnear_top` | end-to-end at reduced size (2 × 2 DIMMs, shard 4, window 2) |
| `tb_gnnear_top_full` | the same flow with every parameter at its default |

Both end-to-end testbenches:

- generate a random graph and the instruction streams;
- model each DRAM rank behaviourally, with data that is a known function of
  the address, and flag any DDR timing breach (`tb/dram_rank_model.sv`);
- check every merged vector that reaches the scratchpad against a reference
  sum;
- do a broadcast and a plain write-back and aggregate the written vector
  again;
- push one vector through the GEMM and the VPU.

They also count each mechanism and fail if one never happens: load/compute
overlap, row hit and miss, broadcast write, bypass, window stall,
out-of-order merge, commit, empty-shard skip, GEMM and VPU.

The full-size testbench takes about a minute to build and run: 16 NMEs,
6 intervals of 128 destinations, over a thousand instructions.

## Sizes and what fits

At the defaults:

- one L-type moves at most 512 B (256 BF16 values);
- an interval holds 128 destinations;
- 16 bits number the intervals, and the window comparison wraps correctly;
- an NME can address 2^40 bytes.

The four large graphs below fit by a wide margin. With two layers and a
hidden size of 256, features, activations, gradients and edges stay under
10 GiB, against 512 GB of DIMMs. Aggregating an input layer wider than 256
features takes several column passes, or the trick of doing the combination
first so that aggregation runs on 256-wide vectors.

| Graph | Vertices | Edges | Input features | Intervals at shard 128 |
|---|---|---|---|---|
| Ogbn-Proteins | 132,534 | 39.6 M | 128 | 1,036 |
| Reddit | 232,965 | 114.6 M | 602 | 1,821 |
| Yelp | 716,847 | 7.0 M | 300 | 5,601 |
| Amazon | 2,449,029 | 123.7 M | 100 | 19,134 |

## Where this RTL departs from the described design

- **Not built: the control core, the interconnect, PHYs, DQ/CA buffers and
  the DRAM chips.** The streams the control core would produce are generated
  by the testbenches. The DRAM is a behavioural model.
- **Graph preparation is out of scope.** Partitioning the graph into low- and
  high-degree parts, duplicating high-degree vertices, and interleaving
  intervals over DIMMs only shape the instruction streams, so they belong to
  the control core. The testbenches place vertex u in DIMM u mod the number
  of DIMMs.
- **Shard width.** The narrow shard (one source vertex at a time) follows the
  description. The interval width of 128 destinations is the largest that
  the 8-bit Dst_Index and the buffer slots allow with two shards in flight.
  The description's shard study also uses 127 destinations plus one source.
- **Scheduling.** The memory controller is a fixed-latency,
  worst-case-timing scheduler with round-robin issue. It does not
  reorder requests for row hits, and it does not model power limits. Refresh,
  tRRD and tFAW are not modelled.
- **Data buffer organisation.** The buffer is specified as 16-byte words. Here
  16 of them form one 256-byte row, so the whole execution unit is fed in
  one cycle.
- **Instruction format.** The ISA figure exists in two versions. The 56-bit
  version, which includes the B-type, is used.
- **Encodings the description leaves open were chosen here.** These are the
  op codes, the instruction register depth, FIFO depths, the two source slots,
  clear-on-readout, and the NMP command on the C/A bus.
- **DDR timings.** tRAS is taken as tRC − tRP. tCWL = 12 and tWR = 18 are
  assumed.
- **Rounding.** BF16 rounding is truncation. GEMM accumulation is in BF16.
  Results therefore differ in the last bits from an FP32-accumulating
  reference. The testbenches use small integers, which are exact.
- **VPU.** The operation set is this design's choice.
- **Result placement.** Where merged results land in the scratchpad, a ring
  at `res_base`, is this design's choice.
