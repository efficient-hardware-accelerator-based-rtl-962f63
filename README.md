# A medium-granularity dataflow accelerator for sparse triangular solve

Solving `L x = b` for a sparse lower-triangular `L` is a chain of dependences.
Row `i` needs every `x_j` for which `L_ij` is non-zero. It finishes with
`x_i = (b_i - sum_j L_ij x_j) / L_ii`.

Parallel hardware usually works at one of two granularities:

- **Coarse.** A whole row is one task, and it starts only once all of its
  inputs are known. Processors sit idle on long chains.
- **Fine.** Every multiply-add is its own task. That keeps processors busy,
  but intermediate sums have to move between them, so traffic and
  register-bank conflicts grow.

This design sits between the two. Each row still belongs to exactly one
compute unit (CU), but the CU does not wait for the row's inputs to be
complete. As soon as any `x_j` the row needs has been solved anywhere in the
machine, the CU can fold `L_ij * x_j` into the row's partial sum. The partial
sum never leaves the CU. When no input of the current row is ready, the CU
can park the row's partial sum in a small local register file and switch to
another of its rows. This is called *partial-sum caching*.

The hardware makes no decisions of its own. Every cycle, each of the 64 CUs
executes one very-long-instruction-word slot, prepared off-line by a
scheduler. The slot says:

- which operand sources to select;
- which register words to read, write or free;
- where results go through two crossbars.

Matrix values and right-hand sides are stored in the exact order in which
they will be consumed. The hardware therefore never handles row or column
indices; all position information is implicit in the program.

## Machine overview

```
             +---------------------- input crossbar (64 x 64, 32 bit) -----------------+
             |  word offered by every CU: S4 = own PE result or own x_i register read   |
             v                                                                          |
  +---------------- CU k (k = 0..63) ------------------------------------+              |
  | instr mem bank ->decoder->control unit                               |              |
  | stream bank -> L FIFO ----------------------------+                  |              |
  |             -> b FIFO --+                         |                  |              |
  |  S2: b | in-xbar | out-xbar --> DFF --> PE: (b-psum)*L  or  psum+L*x  ---> pe_out ----+--> output crossbar
  |  S1: 0 | feedback | psum RF -->                                      |              |
  |  psum RF (8 words)  <-- pe_out                                       |              |
  |  x_i RF (64 words)  <-- S3: out-xbar | data memory                   |              |
  |  data memory bank (128 words) <-- S4                                 |--------------+
  +----------------------------------------------------------------------+
```

Top level `sptrsv_accel` holds:

- `2^N` CUs. N = 6 gives 64 CUs.
- Per CU, one bank of each memory:
  - the instruction memory (1024 words);
  - the stream memory (1024 words);
  - the data memory (128 words).

  Across 64 CUs that makes 65,536 instruction words, 65,536 stream words and
  8,192 solution words.
- Two 64-port crossbars:
  - The **input crossbar** delivers, to each CU, the word that one chosen CU
    puts on its S4 output. That word is either a value read from that CU's
    `x_i` register file, or that CU's fresh PE result.
  - The **output crossbar** delivers, to each CU, the PE result of one chosen
    CU. It feeds the `x_i` register-file write port (S3) and the PE operand
    multiplexer (S2).

  Because any PE can read any register file through the crossbar, a CU can
  reach values held in any register file. Several CUs selecting the same
  source see one register read: a broadcast.

## The compute unit

### The processing element

The PE is a single-precision adder and multiplier in series. A one-bit mode
`ct` selects the operation:

| ct | result                | use                                    |
|----|-----------------------|----------------------------------------|
| 1  | `psum + L_ij * x_j`   | one edge of a row                      |
| 0  | `(b_i - psum) * L_ii'` | finish a row                           |

In the finish case (`ct = 0`), the stream carries `L_ii' = 1/L_ii`, computed
in advance by the scheduler. The hardware therefore never divides.

The subtraction negates `psum` ahead of the adder. The adder and multiplier
are ordinary IEEE-754 binary32 units with these choices:

- rounding is to nearest, ties to even;
- subnormal inputs and results are flushed to zero;
- infinities and NaN propagate (the NaN produced is `7FC00000`).

A DFF in front of the PE registers all of its operands. This register is
clocked only when the instruction is not a `Block` (nop) slot. A blocked CU
therefore keeps its PE output steady. That matters because that output is
still the live partial sum through the feedback path.

### Operand multiplexers

| mux | selects                                   | between                                                   |
|-----|-------------------------------------------|-----------------------------------------------------------|
| S1  | partial-sum operand                       | zero (row starts), feedback of own PE result (same row), psum register file (parked row resumes) |
| S2  | x / b operand                             | b FIFO (finish), input crossbar (value from a register file), output crossbar (value just produced by a PE) |
| S3  | `x_i` register-file write data            | output crossbar, or data memory (re-load of a spilled value) |
| S4  | word this CU offers to input crossbar and its data memory | own `x_i` register read, or own PE result      |

### Register files with automatic write addresses

There are two register files per CU:

- the `x_i` register file, 64 words, which holds solved values that are
  still needed;
- the `psum` register file, 8 words, which holds parked partial sums.

Neither file takes a write address from the instruction. Each word has a
valid bit, and a priority encoder picks the lowest free word for the next
write. The scheduler tracks the same valid bits in software, so it always
knows where a value will land. It can then name that address in a later
read.

Words are freed as follows:

- A `psum` word is freed by the read that resumes its row.
- An `x_i` word is freed when the reading instruction sets `R_vs` ("release
  after this read").

A read and a write in the same cycle behave read-before-write: the word freed
by this cycle's read is already a candidate for this cycle's write. The
resulting *swap* is common. It happens when one row is parked while another
is resumed, and the parked partial sum goes into the word just vacated. The
register file asserts that no write ever hits a full file.

The data memory also has no write address. A counter, cleared at the start
of each program, gives consecutive addresses. Solutions are written once and
never overwritten.

### Instruction word

The fields, their order and their widths are the published ones. Packing
them most-significant first, as in `cu_instr_t`, is this design's choice:

| field         | bits | meaning |
|---------------|------|---------|
| `psum_ren`    | 1    | read (and free) a psum word |
| `psum_raddr`  | K=3  | its address; when `psum_ren`=0 the MSB selects S1 between zero and feedback |
| `psum_wen`    | 1    | park the PE result in the psum file |
| `xi_ren`      | 1    | read the x_i file |
| `xi_rvs`      | 1    | free the word read |
| `xi_raddr`    | M=6  | x_i read address |
| `xi_wen`      | 1    | write the x_i file (data per S3) |
| `dm_ren`      | 1    | read the data memory (spill re-load) |
| `dm_raddr`    | T=7  | its address |
| `dm_wen`      | 1    | write the S4 word to the data memory |
| `i_en`        | N=6  | which CU this CU takes from the input crossbar |
| `o_en`        | N=6  | which CU this CU takes from the output crossbar |
| `s34_en`      | 2    | bit 1: S3 takes the data memory; bit 0: S4 takes the own PE result |
| `pe_en`       | 2    | 00 block; 01 `ct`=1 with S2 = input crossbar; 10 `ct`=1 with S2 = output crossbar; 11 `ct`=0 with S2 = b FIFO |

At the default sizes the instruction word is 39 bits. Changing N, M, K or T
in `sptrsv_pkg` resizes every field.

## Timing: what happens in which cycle

This is the one point that someone writing a scheduler for this RTL must get
exactly right. The rule is: **an instruction's reads act in its own cycle;
its write-backs act on the previous executed instruction's result.**

1. **Reads, selections and pops in the issue cycle.** In the cycle an
   instruction is issued:
   - the register files are read combinationally;
   - the crossbars and S1 to S4 settle;
   - the L FIFO pops, plus the b FIFO when `ct` = 0;
   - the DFF captures the PE operands at the clock edge.
2. **Results in the next cycle.** The PE result, `pe_out`, is therefore
   visible during the next cycle. All write-back fields act on that visible
   `pe_out`: `psum_wen`, `xi_wen` with S3 from the output crossbar, `dm_wen`
   with S4 = PE, and `o_en` of consumers. So the instruction in cycle `t+1`
   carries the write-backs for the result of the instruction in cycle `t`.
3. **Back-to-back dependence.** A row that continues in cycle `t+1` selects
   feedback on S1 and gets `pe_out` of cycle `t` directly. A row that is
   parked instead has `psum_wen` in cycle `t+1`. That cycle can already be
   resuming another row from the psum file, giving the swap described above.
4. **Direct reuse.** A value finished in cycle `t` can be consumed in cycle
   `t+1` by any number of CUs through the output crossbar, with S2 = output
   crossbar. It does not have to pass through a register file first.
5. **Blocked slots.** A `Block` slot pops nothing and does not clock the DFF.
   Its write-back fields still act, on the result that is still visible. This
   is how a CU parks or stores its last result while it idles.
6. **Data-memory read.** This read is synchronous. A word read in cycle `t`
   is written to the `x_i` file (S3 = 1) by the instruction of cycle `t+1`.

The data memory is the target for register spills: a value is stored
through S4 and loaded back through S3. The hardware supports both
directions.

## Streams

Each CU's stream-memory bank holds the CU's `L` values growing up from
address 0 and its `b` values growing down from the top address (1023). Each
has its own read pointer and read port. Both are consumed strictly in order,
so the scheduler writes them in exactly the order the CU's instructions pop
them:

- the L stream holds one word per executed instruction;
- the b stream holds one word per finished row.

Two 4-deep FIFOs decouple the one-cycle memory latency from the pops. Each
FIFO counts the word in flight, so it never over-fetches. A FIFO that is
popped while empty fires an underrun assertion.

## Running a program

The host side is not specified beyond "load instructions and streams, run,
read results". The top therefore has a simple port set:

1. With `busy` low, write the instruction banks (`load_sel` = 0, low 39 bits
   of `load_data`) and the stream banks (`load_sel` = 1, low 32 bits). Each
   write goes to the `(load_cu, load_addr)` word.
2. Set `prog_len` (1 to 1024) and pulse `start`. The sequencer then runs:
   - **CLEAR** (1 cycle): empties both register files of every CU and flushes
     the FIFOs. It also clears the stream pointers and the data-memory write
     counters.
   - **PREFETCH** (3 cycles): fills the FIFOs and reads the first
     instruction.
   - **RUN**: issues `prog_len` instructions on consecutive cycles, then
     raises `done`.

   From start to done takes `prog_len + 5` cycles. `cycles` reports the
   number of instructions issued.
3. Read solutions through `rd_cu` and `rd_addr`, with `rd_data` one cycle
   later. A solution's address is its position in the order of that CU's
   data-memory writes.

## Sizes

| parameter | value | meaning |
|-----------|-------|---------|
| N | 6 | 64 CUs |
| M | 6 | 64-word x_i register file per CU |
| K | 3 | 8-word psum register file per CU |
| T | 7 | 128-word data-memory bank per CU, 8192 in total |
| IMEM_AW | 10 | 1024 instructions per CU, 65536 in total |
| SMEM_AW | 10 | 1024 stream words per CU, 65536 in total |

All defaults are the full published configuration; nothing is scaled down.

A matrix fits when all of the following hold:

- each CU's rows fit in its 128 data-memory words;
- its non-zeros plus rows fit in its 1024 stream words;
- the schedule is at most 1024 cycles long.

Small circuit and power-network matrices of one to two thousand rows and a
few thousand non-zeros fit comfortably. Matrices with tens of thousands of
rows do not fit in one pass.

## How far the RTL follows the published design

These parts follow the published design:

- the CU structure: decoder, control unit, DFF, PE, two register files, S1
  to S4;
- the crossbar interconnect;
- the instruction fields and their widths;
- the PE equations and reciprocal diagonal;
- the lowest-free-address rule with per-word valid bits;
- the release-after-read bit, and psum release on read;
- the counter-addressed data memory;
- the S1 select hidden in the psum address MSB, and its decode table;
- the `PE_en` decode table (00 block, 01 and 10 accumulate with two different
  S2 selects, 11 finish with the b FIFO);
- sequential instruction and stream access;
- all memory and register-file sizes.

These are this design's own choices, where the description is silent:

- The cycle-level timing convention above. It covers when write-backs act,
  and the synchronous data-memory read.
- Which S2 input the codes 01 and 10 reach: input crossbar for 01, output
  crossbar for 10.
- Bit 1 of `s34_en` driving S3 and bit 0 driving S4.
- Floating-point rounding and subnormal handling.
- The split of each stream bank into an upward L region and a downward b
  region.
- FIFO depth and the prefetch phase.
- The host load and read ports, the start/done sequencer, and synchronous
  active-low reset.

These parts are not provided:

- **The compiler.** The published flow relies on an off-line compiler that:
  - allocates rows to CUs;
  - decides blocking and psum parking;
  - reorders the edges within a row to avoid register-bank conflicts and
    increase reuse;
  - inserts spill stores and loads from a live-range analysis.

  None of that is hardware. The end-to-end testbench contains a compact
  scheduler written for verification. It uses:
  - round-robin row allocation;
  - the same parking rules;
  - a greedy edge choice that prefers broadcasts, then direct reuse, then
    free register ports.

  It does not implement the published edge-reordering algorithm. It does not
  spill either: it only uses matrices whose live values fit in the `x_i`
  register files. The spill datapath (data-memory read, S3) is in the RTL and
  is exercised by the CU testbench.
- **Programs longer than 1024 cycles per pass.** How longer programs are fed
  is not described. The RTL runs one instruction-memory load per start.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. The testbenches work
as follows:

- **Floating point** (`fp32_adder_tb`, `fp32_multiplier_tb`,
  `processing_element_tb`). They compare against a reference that computes
  in double precision and rounds once to single precision (`fp_ref_pkg`).
  For one add or one multiply of single-precision operands, that result is
  exact. The operands are random, and the tests include directed cases for
  ties, cancellation, overflow and zero.
- **Storage and control blocks.** Each is checked against a behavioural
  model kept in the testbench. In the register-file test, the model tracks
  valid bits and the lowest-free rule.
- **`compute_unit_tb`.** Runs a hand-written instruction sequence through one
  CU. It covers parking, resume, swap, blocked-slot hold, data-memory store
  and re-load, release, and write-address allocation.
- **`sptrsv_accel_tb`.** Runs the full 64-CU machine with default parameters.
  For each of three random matrices, the built-in scheduler produces the
  program, which is loaded and run. The testbench then checks:
  - the run length and the start-to-done latency;
  - every solution, bit for bit, against a reference solve that performs the
    same float operations in the same order.

  It also counts each mechanism of the design and fails if any never
  occurs. The counted mechanisms are: park, resume, swap, block from
  dependences, block from psum capacity, direct reuse through the output
  crossbar, register-file read, broadcast, release, finish, data-memory
  write, and an edge computed before the row's other inputs existed.
- **`sptrsv_workload_tb`.** Runs the same flow at full size on 13 random
  matrices. Each has the row and non-zero counts of one of the circuit,
  power-network and structural benchmarks usually used for this problem,
  from `bp_200` (822 rows) up to `c-36` (7,479 rows) and `nnc1374`
  (17,897 non-zeros). Dependences are drawn from the previous 256 rows. All
  13 solve bit-exact, in 97 to about 470 cycles.

  These matrices match the benchmarks in size only, not in structure. Their
  cycle counts therefore say little about the real matrices. One
  size-matched matrix, standing in for `add32` (4,960 rows), needs more than
  1024 cycles with this scheduler, so it is not part of the test.

To simulate with plain Verilator (version 5), from the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/sptrsv_pkg.sv tb/fp_ref_pkg.sv tb/sptrsv_accel_tb.sv \
    --top-module sptrsv_accel_tb -Mdir obj -o sim
./obj/sim
```

Replace the testbench name to run any other test. Unit tests finish in
seconds. The 64-CU end-to-end test takes about a minute to compile and a few
seconds to run. The workload test runs for about a minute.

Verilator warns that the processing element has a combinational loop
(`UNOPTFLAT`). This is a false path, described in that file's header: the
adder and multiplier are wired in both orders, and `ct` picks one.

## Files

| file | content |
|------|---------|
| `rtl/sptrsv_pkg.sv` | sizes, instruction and control types, `PE_en` codes |
| `rtl/fp32_adder.sv`, `rtl/fp32_multiplier.sv` | binary32 arithmetic |
| `rtl/processing_element.sv` | adder and multiplier in series, `ct` modes |
| `rtl/alloc_regfile.sv` | register file with valid bits and lowest-free write address (used for x_i and psum) |
| `rtl/stream_fifo.sv` | prefetching FIFO in front of a stream port |
| `rtl/cu_decoder.sv`, `rtl/cu_control_unit.sv` | instruction decode; gating, pops, data-memory write counter |
| `rtl/compute_unit.sv` | one CU |
| `rtl/crossbar.sv` | 64-port selecting crossbar |
| `rtl/instruction_memory.sv`, `rtl/stream_memory.sv`, `rtl/data_memory.sv` | per-CU memory banks |
| `rtl/sptrsv_accel.sv` | top: CUs, crossbars, memories, sequencer |
| `tb/*_tb.sv` | one testbench per module; `sptrsv_accel_tb` is the full-size end-to-end test |
| `tb/sptrsv_workload_tb.sv` | full-size runs on matrices sized like common benchmarks |
| `tb/sptrsv_sched.svh` | matrix generators, the test scheduler and the load/run/check task shared by both end-to-end tests |
| `tb/fp_ref_pkg.sv` | single-precision reference arithmetic for the testbenches |
