# Near-cache stencil accelerator (Casper-style) in SystemVerilog

Stencil kernels (Jacobi sweeps, blur filters, finite-difference updates) read each grid point
together with a fixed set of neighbours. They do very little arithmetic per byte. On a CPU they are
limited by how fast data climbs the cache hierarchy, not by the floating-point units. This design
puts a small vector unit, a **stencil processing unit (SPU)**, next to every slice of a sliced
last-level cache (LLC). The SPUs stream grid rows straight out of the LLC, multiply them by
constants, accumulate, and write results back to the LLC. Three ideas make that work:

1. **A tiny, reusable program.** A stencil is written as one 15-bit instruction per stencil point.
   The SPU replays the same program for every group of 8 grid points (one 64-byte cache line of
   doubles).
2. **Unaligned loads inside the cache.** A neighbour such as `A[i-1]` for a line starting at
   `A[i]` straddles two cache lines. The LLC slice serves that in one access. A second tag port
   matches both lines, each data subarray reads from the right row, and a rotator puts the first
   wanted element in lane 0.
3. **Stencil-segment slice mapping.** Inside a registered address range (the *stencil segment*),
   addresses map to slices in contiguous 128 kB blocks, round robin, instead of line by line. An
   SPU therefore finds most of its rows in its own slice, and equally indexed parts of different
   arrays land in the same slice.

The RTL is parameterised. Its defaults are the evaluated system: 16 SPUs, 16 LLC slices of 2 MB
(16 ways, 2048 sets, 64 B lines), 10-entry load queues, 64-instruction program buffers, 16 streams
and 16 constants per SPU, and 128 kB blocks.

## Programming model and command port

The CPU drives the accelerator with a handful of calls. Each call is one command on
`casper_top`'s command port (`cmd_valid/cmd_ready/cmd`, type `host_cmd_t`, opcodes in
`casper_pkg::cmd_op_e`):

| command | fields | effect |
|---|---|---|
| `CMD_SEGMENT` | addr = base, data = size (bytes) | sets the stencil segment in every injection point |
| `CMD_CODE` | idx = position, data[14:0] = instruction | writes one instruction into every SPU |
| `CMD_CODE_LEN` | data = number of instructions | program length, 1 to 64 |
| `CMD_CONST` | idx = 0..15, data = IEEE double | constant into every SPU |
| `CMD_STREAM` | acc = SPU, idx = stream, addr = start | stream start address; resets its position |
| `CMD_NELEM` | acc = SPU, data = n | number of output points for that SPU |
| `CMD_START` | none | starts all SPUs |

While a computation runs, `cmd_ready` stays low, because a new computation may not start before
the current one ends. When every SPU has finished, and every one of its stores has been
acknowledged, `done` rises and stays high until the next start. `done_irq` pulses for one cycle at
that moment. In the published design one SPU acts as leader and tracks the others; here the
equivalent AND of the SPUs' done flags sits in `casper_ctrl`.

The CPU reads and writes data through a line-wide host port (`host_req_*`, `host_resp_*`). It is
one more requester on the interconnect. Host requests may allocate in every LLC way. SPU requests
never allocate in the top way, which stays reserved for the CPU's other work.

### Example: 2D Jacobi

For a row-major grid with rows of `R` doubles, `B[j][i] = 0.2*(A[j-1][i] + A[j][i-1] + A[j][i] +
A[j][i+1] + A[j+1][i])` needs three input streams and one output stream. The streams are
s1 = the row above, s2 = the current row, s3 = the row below, and s0 = the output. The program is:

```
      cidx sidx dir amt clr out adv
  0:   0    1    0   0   1   0   1    c0*s1          (start point, advance s1)
  1:   0    2    1   1   0   0   0    + c0*s2 >> 1   (A[j][i-1]: shift right by one)
  2:   0    2    0   0   0   0   0    + c0*s2
  3:   0    2    0   1   0   0   1    + c0*s2 << 1   (A[j][i+1]: shift left by one, advance s2)
  4:   0    3    0   0   0   1   1    + c0*s3, emit 8 results, advance s3
```

`tb/tb_casper_top.sv` runs exactly this program.

## Instruction format

```
 14    11 10     7   6     5   3   2     1      0
 +-------+--------+-----+-----+-----+------+-----+
 | cidx  |  sidx  | dir | amt | clr |  out | adv |
 +-------+--------+-----+-----+-----+------+-----+
```

- `cidx` selects the constant. `sidx` selects the stream.
- `dir`/`amt` request a shift by `amt` elements. `dir=1` ("right") means the 8 lanes hold elements
  `p-amt .. p+7-amt`, reaching into the previous line. `dir=0` ("left") means they hold
  `p+amt .. p+7+amt`, reaching into the next line.
- `clr` starts a new set of 8 output points: the accumulator is replaced, not added to.
- `out` sends the accumulated 8 results to the output stream (s0) after this instruction.
- `adv` moves the stream forward by 8 elements after its load.

Stream addresses are `start + 8*position`. Stream start addresses must be line aligned. The decoder
flags an unaligned start and an assertion in the SPU catches it. All shifting is done with
`dir/amt`.

## The stencil processing unit (`casper_spu`)

```
 program buffer -> decoder -> stream table -> request port --> interconnect --> LLC slices
   (64 x 15b)      (fields,     (16 starts,       |                                  |
                    line addr)   positions)       v                                  v
                                          load queue (10) <-------- responses (any order)
 constant buffer (16 doubles) ----------->     | in order
                                               v
                                   8-lane multiply -> accumulate -> store buffer (4) -> stores
```

- **Issue.** One instruction per cycle. Each load gets a load-queue entry, tagged with its slot
  index and the instruction's `cidx`, `clr` and `out` bits. The program counter wraps at the code
  length. After `ceil(n/8)` passes the SPU stops issuing.
- **Load queue** (`spu_load_queue`). Responses can come back in any order: local and remote slices
  answer at different times, and misses stall a slice. The queue releases entries strictly in
  program order. A load that was split in two (see below) is released only after both halves have
  arrived; the halves carry complementary lane masks and are merged by OR.
- **Execution unit** (`spu_exec_unit`). Eight double lanes, two stages. Stage 1 registers
  `line * constant`. Stage 2 either replaces or adds to the accumulator, and hands out the 512-bit
  sum when `out` is set. Floating point is IEEE-754 binary64 with round-to-nearest-even. Subnormal
  inputs and results are flushed to zero. Multiply and add round separately (no fused
  multiply-add).
- **Stores.** Results go to a 4-entry store buffer. Stores take priority on the request port. The
  queue head is consumed only while the store buffer can absorb everything in flight, so the
  execution unit never stalls mid-pipeline. The SPU reports done after its last store is
  acknowledged.

Two strobes, `ev_lq_full` and `ev_head_wait`, report cycles where issue was blocked by a full load
queue, or where the oldest load had not yet returned. The testbenches use them to show that these
situations really occur.

## Unaligned loads inside an LLC slice (`llc_slice`, `llc_row_select`, `llc_rotate`)

This is the least obvious part of the design. A 64-byte line is striped over 8 data subarrays,
one 64-bit element each. Subarray `k` of set `s` holds element `k` of the line that maps to set
`s`. Because consecutive lines go to consecutive sets, the two lines of a shifted load are always
in sets `s` and `s±1`.

Take a right shift by `amt` of line L, which lies in set `s`:

- **Rows.** Subarrays `k >= 8-amt` must read set `s-1`, the tail of line L-1. The others read set
  `s`. For a left shift, subarrays `k < amt` read set `s+1` and the rest read set `s`.
  `llc_row_select` computes this per subarray from `dir`, `amt` and the subarray index. It is the
  3:1 row multiplexer in front of each subarray's decoder.
- **Tags.** A second tag read port looks up the adjacent set in the same cycle. Each subarray uses
  the way-hit of whichever line it reads, so the two lines may sit in different ways.
- **Rotation.** The 8 elements read out are in subarray order. `llc_rotate`, a 3-stage barrel
  rotator, turns them by `-amt` (right shift) or `+amt` (left shift), so lane 0 holds the first
  requested element.

If either line is missing, the slice handles a normal miss. It writes back the victim if it is
dirty, fetches the missing line, and retries the request; the slice blocks meanwhile. An SPU store
that misses allocates the line without fetching it, because SPU stores always write whole lines.

Slice timing:

- After reset the slice spends one cycle per set clearing its tags (`init_done`).
- A hit is answered two cycles after the request is accepted, and the slice accepts one request
  per cycle.
- A miss costs a write-back if the victim is dirty, plus a fill from memory.

The victim is the first invalid way, otherwise a round-robin choice among the ways the requester
may use.

## Stencil segment mapping and split loads (`slice_hash`, `noc_inject`)

Every requester enters the interconnect through an injection point that chooses the home slice.
`slice_hash` compares the address with the segment registers using one adder and two comparisons.

- **Inside the segment**, the home is `addr[17 +: log2(NSLICE)]`: 128 kB blocks, round robin. The
  block number counts from address 0. Arrays that start on a `NSLICE * 128 kB` boundary (2 MB with
  16 slices) therefore line up slice by slice.
- **Outside the segment**, the home is `line mod NSLICE`. This stands in for the CPU's normal
  slice hash, which is not given.

A shifted load whose two lines fall in different slices cannot be served by one slice. This
happens at 128 kB block edges, for example at the row above the first row of a block. `noc_inject`
then sends two packets:

1. The first packet goes to the requested line's home, with the mask of the lanes that line
   supplies.
2. The second packet goes to the adjacent line's home, with the remaining lanes.

Each slice performs the same row select and rotation on its own line. The masked-off lanes come
back as zero, and the load queue ORs the two halves together. The request is accepted together
with its first packet, so the SPU's load-queue entry exists before any half can come back. The
second packet is held in the injection point. How the published design handles such boundary
loads is not described, so this splitting is this design's own.

## Interconnect (`casper_noc`, `rr_arbiter`)

The evaluated system uses a 2D mesh with XY routing that belongs to the host chip. Here a
crossbar replaces it:

- each slice input has a round-robin arbiter over the 17 requesters (16 SPUs and the host);
- each requester's response port has a round-robin arbiter over the 16 slices;
- responses then pass a fixed `RESP_LAT`-stage pipeline. The default is 6, so a local hit reaches
  the execution unit about 8 cycles after issue, the load-to-use latency quoted for an SPU and its
  local slice.

Remote slices are not slower than the local one, and links never congest. Timing differences
between near and far slices are therefore not reproduced; only ordering effects are.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NSPU` | 16 | SPUs = LLC slices |
| `SETS`, `WAYS` | 2048, 16 | per slice: 2 MB of 64 B lines |
| `RESERVED_WAYS` | 1 | ways SPU requests may not allocate into |
| `LQ_DEPTH` | 10 | load-queue entries per SPU |
| `IBUF_DEPTH` | 64 | instructions per SPU |
| `BLOCK_BITS` | 17 | log2 of the segment block size (128 kB) |
| `RESP_LAT` | 6 | response pipeline stages (own choice) |

Sizes checked against the evaluated workloads:

- **Program length.** The largest kernel has 33 points, so it needs 33 instructions, which fits
  in 64.
- **Streams.** A 2D 5x5 blur needs 5 input rows plus 1 output, and a 7-point 3D kernel needs 5
  rows plus 1 output. Both fit in 16.
- **Capacity.** The largest grids (2048x2048 2D, 256x256x64 3D, 4M-point 1D) need 64 MB for input
  plus output. That is more than the 30 MB of LLC that SPUs may allocate, so those runs stream from
  memory through misses. This costs time but not correctness.

## Departures from the published design

- Mesh interconnect replaced by a crossbar with a fixed response latency (see above).
- CPU cores, private caches and coherence are outside the design. The LLC keeps only valid and
  dirty bits per line. The host is one line-wide port.
- Floating point flushes subnormals to zero.
- The leader's completion tracking is a central AND rather than state kept in one SPU.
- Loads across a slice boundary are split and merged (unspecified in the original).
- Main memory is not part of the RTL. Each slice has a memory port (`mem_req_*` / `mem_resp_*`,
  one line per request, write-backs without response). The testbenches attach a fixed-latency
  model.
- SRAM subarrays are plain arrays. The slice's per-way tag arrays and per-subarray data arrays are
  separate memories, mirroring the physical organisation.
- The 36-cycle CPU round trip, energy and area figures are not modelled.

## Verification

Every module in `rtl/` has a self-checking testbench in `tb/` with the same name plus a `tb_`
prefix. Each testbench:

- compares the module's outputs with values computed independently (SystemVerilog `real`
  arithmetic for the floating point, address arithmetic for mappings);
- randomises with `$urandom`;
- has a watchdog;
- ends with a line `TB_RESULT checks=N failures=M`.

The two end-to-end benches run the Jacobi-2D program above, check the results read back through
the host port against double arithmetic, and fail if any of these never happened: unaligned loads,
split loads, misses, write-backs, load-queue-full stalls, waits for out-of-order data, a command
refused while running, and exactly one completion interrupt.

- `tb_casper_top` uses 4 SPUs with small slices (256 sets x 4 ways) and 2048 points per SPU.
- `tb_casper_top_full` uses every default parameter: 16 SPUs, 16 x 2 MB slices, and 131072 points
  per SPU. The grid is 1024 x 2048 doubles, and its two arrays exceed the LLC space the SPUs may
  use, so lines are evicted and written back. It checks a sample of output lines. It takes about
  five minutes. With cold data the run is bound by misses, so its load queues never fill; this
  bench counts load-queue-full stalls but does not require them.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/casper_pkg.sv tb/tb_mem_pkg.sv tb/tb_casper_top.sv -o sim
./obj_dir/sim
```

Replace `tb_casper_top` with any other testbench name. `tb_mem_pkg.sv` is only needed by the
benches that use the memory model.

## File map

| file | role |
|---|---|
| `rtl/casper_pkg.sv` | shared types: instruction, request/response packets, command |
| `rtl/fp64_mul.sv`, `rtl/fp64_add.sv` | binary64 multiplier and adder |
| `rtl/spu_*.sv`, `rtl/casper_spu.sv` | the stencil processing unit and its parts |
| `rtl/llc_row_select.sv`, `rtl/llc_rotate.sv`, `rtl/llc_slice.sv` | LLC slice with unaligned loads |
| `rtl/slice_hash.sv`, `rtl/noc_inject.sv`, `rtl/rr_arbiter.sv`, `rtl/casper_noc.sv` | slice mapping and interconnect |
| `rtl/casper_ctrl.sv`, `rtl/casper_top.sv` | command decoding, completion, top level |
| `tb/tb_mem_model.sv`, `tb/tb_mem_pkg.sv` | fixed-latency main-memory model and its backing store |
