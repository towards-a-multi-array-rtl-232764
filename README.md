# Multi-array systolic accelerator for large FP32 matrix multiplication

This is synthesizable SystemVerilog for an accelerator that computes
C = A x B for large dense single-precision matrices held in external DRAM.
It follows the multi-array architecture of Shen, Qiao, Huang, Wen and Zhang,
"Towards a Multi-array Architecture for Accelerating Large-scale Matrix
Multiplication on FPGAs". Several details are not given in that description.
Where this code had to fill one in, the choice is listed in
[Where this RTL departs from or adds to the architecture](#where-this-rtl-departs-from-or-adds-to-the-architecture).

The starting point is the well-known linear systolic array for blocked matrix
multiplication. It has one chain of processing elements (PEs). Each PE owns
one row of a result block, and operands flow past the PEs one hop per cycle.
A single long array is inefficient when blocks are small. Many short arrays
need more memory bandwidth. This design therefore builds `P_M` short arrays
of `P` PEs (4 x 64 by default), with a multiplexer between every two adjacent
arrays. The host chooses, per run, which neighbours are joined:

| `coop` (3 bits) | arrays working in parallel (N_p) | PEs per array | largest S_i |
|-----------------|----------------------------------|---------------|-------------|
| `000`           | 4 (or 3 with `array_en = 0111`)  | 64            | 64          |
| `101`           | 2                                | 128           | 128         |
| `111`           | 1                                | 256           | 256         |

Tasks are spread over the arrays through one queue per array. An array whose
queue runs dry takes a task from the fullest queue; this is called work
stealing.

## The blocked product and what a task is

A is cut into row blocks SA_i of S_i rows and all K columns. B is cut into
column blocks SB_j of K rows and S_j columns. One **task** computes
C_ij = SA_i x SB_j as K rank-1 updates:

    C_ij = sum over k = 1..K of  (column k of SA_i) x (row k of SB_j)

Inside an array, PE number `pid` holds row `pid` of C_ij. In iteration k it
takes element `pid` of column k of SA_i (register R_a). It multiplies that
element with each of the S_j elements of row k of SB_j as they stream past,
and adds each product to its partial sum for that column. The partial sums
live in a local memory M_c with one word per column. In the last iteration
the sums go to a result FIFO f_c instead of M_c. The results then leave the
array through PE 0.

A column of SA is a row of A transposed. The host therefore stores A
**transposed** (A^T, row-major). This makes every operand fetch a contiguous
burst: row k of SA_i^T is `S_i` consecutive words, and row k of SB_j is `S_j`
consecutive words. If M or N is not a multiple of the block size, the host
either pads with zeros or gives the edge tasks smaller `BZ` fields.

A task is described by a **buffer descriptor** (`mm_pkg::desc_t`). All
addresses and strides count 32-bit words.

| field    | meaning                                          |
|----------|--------------------------------------------------|
| `addr_a` | first word of SA_i^T (row 0 of the block)        |
| `str_a`  | distance between rows of A^T (normally M)        |
| `bz_a`   | S_i, 1..256                                      |
| `addr_b` | first word of SB_j                               |
| `str_b`  | distance between rows of B (normally N)          |
| `bz_b`   | S_j, 1..256                                      |
| `iter_k` | K, 1..65535                                      |
| `addr_c` | first word of C_ij                               |
| `str_c`  | distance between rows of C (normally N)          |

## Inside a PE array: three streams

Three streams pass along an array. Each element of a stream is a *token*
(`mm_pkg`). A token carries its data word together with the indices and flags
that the PE needs. Because of this, tokens of two consecutive tasks can be in
the same array at once.

* **Stream A** (`a_tok_t`, head to tail) carries the column of SA. Each element
  has its row index `idx` and S_i - 1. A PE keeps the element whose `idx`
  equals its `pid`.
* **Stream B** (`b_tok_t`, head to tail) carries the row of SB. Each element has
  its column `col` and S_i - 1, plus four flags: `row_first`, `row_last`,
  `first_it` (k = 1: add to zero) and `last_it` (k = K: write to f_c).
* **Stream C** (`c_tok_t`, tail to head) carries the results. It uses a
  valid/ready handshake. Its `last` flag marks the final element of a block.

A and B move through one register per PE (`fa`, `rb` in `pe.sv`). A PE
forwards them only while `S_i - 1 > pid`. Beyond the last active PE the
forwarded stream is null, so the unused PEs stay idle. A and B have **no
back-pressure** inside the array. Every PE sees the head's schedule, delayed
by one cycle per hop. All stalls are therefore made at the head (see the next
section).

### Timing inside one PE

R_a is double buffered. While row k of SB is in use with `ra_cur` (column k),
the PE catches its element of column k+1 in `ra_next`. The first B element of
each row swaps the two, and that element uses `ra_next` directly.

| cycle | what happens for a B element that is in `rb` at cycle t          |
|-------|------------------------------------------------------------------|
| t     | product `ra x b` enters `fp32_mul` (2 stages)                     |
| t+1   | M_c is read at `col` (registered read)                            |
| t+2   | product and partial sum (or 0 when `first_it`) enter `fp32_add` (3 stages) |
| t+5   | sum written to M_c[col], or pushed into f_c when `last_it`        |

The same M_c word is read again one iteration later. That read must come at
least **ACC_GAP = 5 cycles** after the previous use of the word, or it returns
a stale sum. This holds automatically when S_j >= 5. For smaller S_j the head
stretches the row (see the next section).

### Write-back order

In the last iteration each PE pushes its own S_j results into f_c (`OWN`
mode). It then switches to `PASS` mode. In `PASS` mode it moves results from
the next PE's f_c into its own until the token flagged `last` has passed, and
then returns to `OWN`. The last active PE (`pid == S_i - 1`) flags its final
result `last`. PE 0 therefore delivers C_ij in row-major order, and the memory
access controller can compute each address by counting.

## Phase synchronization: the schedule at the head

The phase synchronization unit (`psu.sv`, one per array) is the part that
makes the array correct. It takes words from the two operand buffers of the
memory access controller and issues them as tokens in phases:

    prefetch : column 1 of SA            (S_i A tokens)
    phase k  : row k of SB  +  column k+1 of SA   (S_j B tokens, S_i A tokens;
               no A tokens in phase K)

A phase ends only when both of its streams are complete. With data always
available, a phase therefore lasts max(S_i, S_j) cycles. Whenever S_i != S_j,
one stream waits for the other (`stall_sync`). Three further rules keep the
PEs safe:

1. Column k+1 never starts before the first element of row k has been issued.
   Otherwise a PE could overwrite `ra_next` before the swap.
2. When S_j < ACC_GAP, the first element of a row waits until the M_c
   distance is met (`stall_gap`). The effective phase length is then
   max(S_i, S_j, 5).
3. The **last** row of a task waits until every result of the previous task
   has left the array (`c_done` from the memory access controller)
   (`stall_drain`). So the f_c FIFOs never hold parts of two blocks, and the
   non-stallable FMAC output always finds room.

For one task, the time from the first A token to the last B token is
`S_i + (K-1)*max(S_i,S_j,5) + S_j` cycles. The unit testbench checks this
figure. One task keeps an array busy for about S_i + K*max(S_i,S_j) cycles
plus the pipeline depth (one cycle per PE hop plus 6 in the last PE). The
next task's loading and prefetch overlap with that time.

## Joining arrays: independent and cooperation modes

`array_mux.sv` sits in front of every array except the first. `coop[j] = 0`
means independent mode: array j+1 takes A and B from its own synchronization
unit and returns results to its own controller port. `coop[j] = 1` means
cooperation mode: array j+1 takes A and B from the tail of array j, and sends
its results into array j's tail. The two arrays then behave as one array of
2P PEs.

`mpe.sv` gives the PEs of a joined group consecutive identifiers: array j gets
`pid_base = P x (distance to its group's head)`. Only the head of a group is
fed. Its queue, controller engine and memory ports serve the whole group. The
others stay idle on the memory side. This is why cooperation lowers the
memory bandwidth needed: fewer blocks are fetched in parallel, but each is
larger.

`coop` and `array_en` are static configuration inputs. Change them only while
the accelerator is idle.

## Task queues and work stealing

`wqm.sv` has one descriptor queue and one task counter per array. The host
appends tasks to any queue through `task_valid/task_queue/task_desc/task_ready`.
Each controller engine takes tasks from the head of its own queue.

Every cycle, each active queue with a counter of zero raises a stealing
request if its controller engine is ready for a new task. Active means the
queue belongs to an enabled group head. A round-robin arbiter
(`rr_arbiter.sv`) picks one request. The controller then compares the
counters of the active queues. The queue with the most tasks becomes the
victim; ties go to the lowest index. A task that the victim's own engine
takes in the same cycle does not count. The victim's newest task moves to
the empty queue in the same cycle, and the idle engine takes it from there.
Because only an idle engine's queue asks, a single task never bounces
between two queues. There is at most one move per cycle, and no move in a cycle with a
host push. Because of stealing, the host may submit all tasks to queue 0 and
still keep every array busy.

## Memory access controller and memory ports

`mac.sv` holds one `mac_engine` per array. An engine takes a descriptor and
does four things:

* It passes (S_i, S_j, K) to the array's synchronization unit through a
  2-entry job FIFO.
* It requests row k of SA^T (`addr_a + k*str_a`, `bz_a` words) on read port
  A, and row k of SB on read port B, for k = 0..K-1.
* It requests a burst only when the 512-word stream buffer has room for the
  whole burst, counting beats still in flight. A memory interface therefore
  never needs back-pressure on read data.
* It writes the results arriving from the array to
  `addr_c + i*str_c + j`, then pulses `c_done`.

While one task computes and writes back, the engine already loads the next
one.

Each array has these ports on the top level (`mm_accel`):

| ports | protocol |
|-------|----------|
| `ra_req_valid/addr/len/ready`, `ra_rsp_valid/data` | read burst for stream A: request handshake, then `len` data beats in order, valid only |
| `rb_req_*`, `rb_rsp_*` | same, for stream B |
| `wr_valid/addr/data/ready` | one result word per handshake |

The DDR memory and its controller are not part of this RTL. A memory
controller that arbitrates these port sets onto one or two DDR channels has
to be added. In the testbenches a behavioural model stands in for it
(`tb/mem_model.sv`), with random latency and random gaps.

## Floating point

`fp32_mul` (2 stages) and `fp32_add` (3 stages) are IEEE-754 binary32 units
that round to nearest, ties to even. Subnormal inputs and results are
flushed to zero. NaN inputs, inf*0 and inf-inf give `0x7FC00000`. An exact
zero sum is +0. Each result is rounded after the multiply and again after
the add, as with a separate multiplier and adder; there is no fused
multiply-add. The testbenches' references follow the same order, so results
are compared bit for bit.

## Parameters

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| `P_M` | 4 | `mm_accel`, `mpe`, `wqm`, `mac` | number of PE arrays (from the architecture) |
| `P` | 64 | `mm_accel`, `mpe`, `pe_array` | PEs per array (from the architecture) |
| `BZ_MAX` | 256 | `mm_pkg` | largest S_j; depth of M_c and f_c in every PE |
| `Q_DEPTH` | 16 | `mm_accel`, `wqm` | tasks per queue (own choice) |
| `SDEPTH` | 512 | `mm_accel`, `mac` | words per operand stream buffer (own choice) |
| `FMUL_LAT`, `FADD_LAT`, `ACC_GAP` | 2, 3, 5 | `mm_pkg` | FMAC pipeline (own choice) |

PE identifiers, S_i - 1 and column indices are 8 bits wide (`IDXW`). So
`P_M x P` must not exceed 256, and S_i and S_j must not exceed 256. If P_M or
P grows, widen `IDXW`, `BZW` and `BZ_MAX` together. The FMAC latencies are
constants that `pe` and `psu` both rely on. If you deepen the FP units, keep
`FMUL_LAT`, `FADD_LAT` and `ACC_GAP = FADD_LAT + 2` in step.

## Using it

1. Hold `rst_n` low for a few cycles.
2. Set `coop` and `array_en`. Tasks for a group must have
   S_i <= (arrays in the group) x P.
3. Store A^T and B in memory. Submit one descriptor per block of C to any
   queue.
4. `blocks_done[j]` pulses each time a block has been written through group
   head j. Count the pulses to know when the product is complete.

Status outputs `steal*`, `stall_sync/gap/drain` and `busy` are for monitoring.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_fp32_mul`, `tb_fp32_add` | thousands of random operands against a double-precision reference rounded once to single (`tb_fp_pkg`); latency; special values |
| `tb_pe` | one PE: forwarding and null gating, double-buffered R_a, accumulation, `last` marking, pass-through of downstream results under back-pressure |
| `tb_psu` | exact token sequence, the span formula above for six block shapes, and the write-back stall |
| `tb_array_mux` | routing in both modes |
| `tb_mpe` | 2 arrays of 4 PEs, random blocks and input gaps, results bit-exact, independent and cooperation modes |
| `tb_wqm` | against a queue model: counters, head task, thief (round-robin), victim (largest), moved task |
| `tb_mac` | burst addresses and order on both read ports, result addresses, `c_done` per block, disabled engine idle |
| `tb_mm_accel` | whole accelerator with 4 arrays of 4 PEs: five products in all four configurations. Every task is submitted to queue 0. Checks all of C and that stealing, all three stall kinds, cooperation transfers, null forwarding and mode switches happened. |
| `tb_alexnet` | default size: the whole AlexNet conv-5 (128x1728x169) and conv-4 (192x1728x169) layers with N_p = 2 and S_i = S_j = 128 and 96, including edge tasks for N = 169; all of C checked; prints cycles against the model's compute bound (about 1.5 min) |
| `tb_conv2_sweep` | default size: a slice of AlexNet conv-2 (128x1200, first 64 of 729 columns) in all four groupings, (N_p, S_i) = (1,128), (2,64), (3,32), (4,16); all of C checked; cycles between the compute bound N_work x (S_i + max(S_i,S_j) x K + 5) and twice that (about 1 min) |
| `tb_mm_accel_full` | whole accelerator at default size (256 PEs): a 256x16x256 product with N_p = 2, S_i = S_j = 128, then 256x8x200 with N_p = 1, S_i = 256, S_j = 200. Checks all of C. Takes well under a minute. |

`tb_alexnet` also reports throughput. With two joined pairs of arrays, the
conv-5 layer takes 255,297 cycles (58.6 GFLOPS at 200 MHz) and conv-4 takes
369,168 cycles (60.8 GFLOPS). The published figures for the same settings are
62.9 and 64.1 GFLOPS. The sum of max(S_i, S_j) x K over the tasks of each
array, which counts the narrow edge tasks (S_j = 41 for N = 169) at their
full phase length, is 221,312 and 331,968 cycles. The rest is task switching
and the random delays of the testbench's memory model; these numbers say
nothing about a real DRAM system.

On the conv-2 slice the four groupings take 174,064, 88,660, 133,251 and
191,125 cycles, 1.13 to 1.24 times the compute bound. Pairs of arrays with
S_i = 64 are fastest here: the two 64x64 tasks run side by side, while the
single 256-PE array holds only M = 128 rows and so leaves half of its PEs
idle.

To run one with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/mm_pkg.sv tb/tb_fp_pkg.sv tb/tb_mm_accel.sv --top-module tb_mm_accel
    ./obj_dir/Vtb_mm_accel

The assertions in `sync_fifo`, `pe`, `psu`, `wqm` and `mac_engine` check the
design's internal rules: no FIFO overflow or underflow, no own result in pass
mode or into a full f_c, steals only into empty queues, legal task sizes, and
no overflow of the stream buffers.

Not verified: timing closure, resource use and behaviour on an FPGA. The
architecture reports 200 MHz on a Virtex-7 XC7VX690T; this RTL has only been
simulated and linted.

## Where this RTL departs from or adds to the architecture

* **Synchronization at the head.** The architecture draws a phase
  synchronization unit in every PE and says only that it inserts stalls, so
  that column k of SA and row k of SB reach each PE together. Here one unit
  per array makes the whole schedule at the head. This works because the
  array itself never stalls. Its rules 2 and 3 (M_c distance, write-back
  hold) are additions that this implementation needs.
* **FIFOs f_a and f_b** are single registers, because A and B are never
  stalled inside an array. f_c is a real FIFO of 256 words.
* **Tokens carry indices and flags.** In their place the architecture
  mentions unspecified "additional control units" for arbitrary block sizes.
* **Work stealing details.** These are not specified: taking the victim's
  newest task, requests only from a queue whose engine is idle, the lowest
  index on a tie, and pausing for host pushes. The architecture's
  work-stealing figure labels queue #1 as the victim while drawing queue #0
  fuller. This RTL follows the rule stated
  in words: the fullest queue is the victim.
* **Descriptor.** `addr_c` and `str_c` are added; the published descriptor
  lists only the A and B fields and ITER_K. Field widths are this design's
  own.
* **Transposition of A** is assumed done by the host, in the layout of the
  operands in memory.
* **Memory ports.** Each array's controller engine has its own set. The
  memory interface and the DDR are outside this RTL.
* **Floating point.** The FP unit internals, the pipeline depths and the
  flush-to-zero behaviour are this design's own; the architecture only names
  an FMAC.
* **Notation.** The architecture's text uses U_k and V_k for a column of SA
  and a row of SB in one place, and the other way round in another. This RTL
  follows the PE description and its figure: column of SA held per PE, row of
  SB streamed.

## Files

`rtl/`: `mm_pkg` (types, constants), `fp32_mul`, `fp32_add`, `sync_fifo`,
`pe`, `pe_array`, `psu`, `array_mux`, `mpe`, `rr_arbiter`, `wqm`,
`mac_engine`, `mac`, `mm_accel` (top).

`tb/`: one testbench per block and three at the default size, as listed
above, plus `tb_fp_pkg`
(reference rounding) and `mem_model` (behavioural DRAM and memory
interface).
