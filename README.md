# REAP: a host-scheduled streaming accelerator for sparse matrix products and sparse Cholesky

Sparse kernels are hard on an FPGA for two reasons. The non-zeros are irregular, and the
control flow depends on the data. REAP splits the work between a host CPU and the FPGA.
The CPU does what it is good at: it walks the compressed (CSR) matrix and decides what has to meet
what. It writes the result as a flat stream of small, self-describing records called *RIR bundles*
(Reorganised Intermediate Representation). The FPGA holds many identical pipelines, and they simply
consume those bundles in order. The FPGA never chases pointers. It matches indices, multiplies,
sorts, adds, divides and takes square roots, and it writes results back in the same bundle format.

This repository holds synthesizable SystemVerilog for the two FPGA engines the design is built
around:

* **SpGEMM**: C = A x B, computed row by row (Gustavson's formulation).
* **Sparse Cholesky**: A = L L^T, left-looking and column by column.

It also holds self-checking testbenches. These play the host's part: they generate matrices,
build the bundle streams, and check the results against double-precision references.

## 1. The RIR bundle

A bundle is a group of non-zeros that share one index. All of them are processed the same way.
In memory every bundle is a header word followed by `count` element words. All words are 64 bits
wide (`reap_pkg`).

| word    | bits 63:32                 | bits 31:28 | bit 27 | bits 26:16 | bits 15:0 |
|---------|----------------------------|------------|--------|------------|-----------|
| header  | shared index ("feature")   | kind       | eor    | reserved   | count     |
| element | distinct index             | fp32 value |        |            |           |

`kind` tells the engine what to do with the bundle:

| kind | name        | meaning                                                         |
|------|-------------|-----------------------------------------------------------------|
| 0    | `A_ROW`     | (part of) a row of A; shared = row index, elements = `<col, val>` |
| 1    | `B_ROW`     | a row of B; shared = row index k, elements = `<col, val>`       |
| 2    | `END_BATCH` | all B rows for the current batch of A bundles have been sent    |
| 3    | `END_ALL`   | end of the stream                                               |
| 4    | `CHOL_RA`   | Cholesky: column k of A; elements = `<row, A(row,k)>`           |
| 5    | `CHOL_RL`   | Cholesky: the rows of L that column k needs (triples, see 3.1)  |
| 6    | `C_ROW`     | a row (or partial row) of the result C                          |

`eor` (end of row) marks the last bundle of a row. It matters when a long row is split over
several bundles, or leaves a pipeline as several runs.

Inside the FPGA each pipeline sees bundles through an `rir_bundle_fifo`. This buffer has two
FIFOs: one for elements and one for headers. The write side pushes elements as they arrive. When
the bundle closes, it pushes the header with the final count, so the writer never needs to know the
count in advance. The read side presents the header first, then the elements, each as one beat
with `rd_first` and `rd_last`. Flow control uses almost-full on the write side and empty on the
read side. Because the element count is only known at close time, a header can never overtake its
elements.

## 2. SpGEMM engine (`spgemm_top`)

### 2.1 Schedule built by the host

Row i of C is the sum, over the non-zeros A(i,k), of A(i,k) times row k of B. The host groups
A-row bundles into **batches** of at most `NUM_PIPES` bundles. The i-th A bundle of a batch goes
to pipeline i. Next, every B row that any of those A bundles needs is sent once, and the input
controller broadcasts it to all pipelines of the batch. An `END_BATCH` bundle closes the batch.
A row of A with more than `CAM_SIZE` (32) non-zeros is split into several A bundles, which land in
different pipelines. Only the last of them carries `eor`. The stream ends with `END_ALL`.

### 2.2 Input controller (`spgemm_input_ctrl`)

The input controller reads the stream with `mem_stream_reader`. This unit issues one read per
clock and keeps a credit count, so the memory read port needs no back-pressure. The controller
decodes headers and routes elements:

* `A_ROW`: goes one-hot to the next pipeline of the batch, and that pipeline's bit is set in the
  batch mask.
* `B_ROW` and `END_BATCH`: are broadcast to every pipeline in the mask. A beat moves only when
  every target can take it, so one full pipeline stalls the broadcast (event `ev_stall`).
* `END_ALL`: waits for all pipelines and the output controller to drain, then pulses `done`.

### 2.3 Pipeline (`spgemm_pipeline`)

Each pipeline is: input bundle FIFO, then PE-1, then PE-2, then PE-3, then output bundle FIFO.

* **PE-1, match and multiply (`spgemm_match_mul`).**
  * An `A_ROW` bundle clears the CAM. Each element's column index goes into the CAM, and a value
    store at the same slot holds A's value.
  * A `B_ROW` bundle costs one CAM lookup, keyed by the bundle's shared index, the row k of B.
    * On a hit, every element `<j, B(k,j)>` becomes a work item `(A(i,k), B(k,j), j)`.
    * On a miss, the bundle is discarded.
  * Work items go through a small queue into a single-precision multiplier. The multiplier's
    result is registered.
  * `END_BATCH` enters the same queue as an end token. It carries the A row's index and `eor`, so
    tokens and products stay in order.
* **PE-2, sorter (`spgemm_sort`).**
  * A shift register of `SORT_DEPTH` entries, kept in ascending column order. Every entry has a
    comparator with the incoming column.
  * One product is inserted per clock: entries with a smaller or equal column stay, the first
    larger entry takes the new product, and the rest shift up.
  * On the end token the register drains smallest-first, one entry per clock, and then passes the
    token on.
  * **Overflow:** if the register is full and another product arrives, the current contents drain
    as a sorted *run* closed by a non-final token (`eor = 0`), and insertion starts again. A row
    with more than 32 partial products in one batch therefore leaves as several sorted runs.
* **PE-3, merge (`spgemm_merge`).** Equal columns are adjacent in a sorted run, so the merge unit
  compares each product only with the element it holds:
  * equal column: the product is added in;
  * different column: the held element is written out.
  * An end token flushes the held element and closes the output bundle (`C_ROW`, shared = row of
    A, `eor` from the token).

Throughput: each stage handles one product per clock. Each B element costs one clock in PE-1, one
in PE-2 (insertion) and, after the row ends, one more (drain).

### 2.4 Output controller (`spgemm_output_ctrl`)

The output controller picks among the pipelines' output FIFOs round-robin. Once it starts a bundle
it stays locked to that pipeline until the bundle's last word, so bundles never interleave. It
writes header and elements to consecutive addresses from `out_base` and counts the bundles
(`out_bundles`).

### 2.5 What the host does with the output

The output is a list of `C_ROW` bundles. Each is sorted by column, with no duplicate columns
inside it. A row of C that was split arrives as several bundles:

* because its A row spanned several pipelines;
* because of sorter overflow;
* because its A row was split by the host.

Only the last bundle has `eor` set. The host adds the bundles of one row, which is a sorted merge
of sorted lists. This mirrors the published design, where the CPU also does the final assembly of
results.

## 3. Sparse Cholesky engine (`chol_top`)

### 3.1 Jobs

Left-looking Cholesky computes column k of L from the rows of L computed before it:

    L(k,k) = sqrt( A(k,k) - L(k,0:k-1) . L(k,0:k-1) )
    L(r,k) = ( A(r,k) - L(r,0:k-1) . L(k,0:k-1) ) / L(k,k)      for r > k with L(r,k) != 0

The host runs the symbolic factorisation, so it knows the full non-zero pattern of L, fill-in
included. It lays each row of L out contiguously in FPGA memory. For every column k it writes one
**job**:

* `CHOL_RA` bundle: column k of A as `<row, A(row,k)>`, diagonal first. Rows that are fill-in
  (zero in A) are left out.
* `CHOL_RL` bundle: one triple per row that column k produces (diagonal first), as two words
  `{R, S}` and `{E, 0}`.
  * R is the row.
  * S is the address where row R of L starts.
  * E is the end of what has been written of it so far.
  * Words `S..E-1` hold `L(R, 0:k-1)` as `<col, val>`, and the new `L(R,k)` is written at E.

A column with more than `NUM_PIPES - 1` off-diagonal non-zeros is split into several jobs. Each
job repeats the diagonal triple, so `L(k,k)` is simply recomputed and rewritten to the same
address.

### 3.2 Input controller (`chol_input_ctrl`)

For each job the controller:

1. **Waits** until every result of the previous job has been written (`outstanding == 0`) and all
   pipelines are idle. Column k depends on the columns before it, so this is the dependency stall
   (`ev_dep_stall`).
2. **Broadcasts column k of A** into every pipeline's Div/Sqrt PE.
3. **Assigns** the job's triples one per pipeline (row r, column k, write address E).
4. **Broadcasts row k of L** (words `S_k..E_k-1`), read through a second memory read port, into
   every dot-product PE's CAM. If row k is longer than the CAM, it is sent in segments of
   `CAM_SIZE` (`ev_segment`).
5. **Streams each pipeline's own row r of L**, once per segment.
6. Pulses `fin`.

### 3.3 Pipeline (`chol_pipeline`)

* **Dot-product PE (`chol_dot_product`).**
  * Row k's elements are written into the CAM, with their values in a store beside it.
  * Each element of row r looks up its column. On a hit, the pair `(L(r,c), L(k,c))` goes
    round-robin to one of `NUM_MULS` multiplier lanes. Each lane has a queue, a multiplier and
    its own accumulators.
  * While the CAM loads, each element of row k also sends `(L(k,c), L(k,c))` to a lane. This
    accumulates the diagonal sum of squares, so every pipeline gets `L(k,.) . L(k,.)` without
    waiting for another pipeline.
  * After `fin`, the lane sums are added up one lane per clock.
* **Div/Sqrt PE (`chol_div_sqrt`).**
  * Looks up A(k,k) and A(r,k) in its CAM. A row absent from column k is fill-in and reads as
    zero (`ev_fill`).
  * Subtracts the dot products, takes the square root, and for off-diagonal rows divides. One step
    per clock.
  * Offers `{row, col, address, value}`.

### 3.4 Output controller (`chol_output_ctrl`)

The output controller writes each result as `{col, L(r,k)}` to its address, choosing among the
pipelines round-robin. It pulses `wr_done` per write, which is what the input controller's
dependency wait counts.

## 4. Arithmetic

All arithmetic is IEEE-754 single precision: `fp_mul`, `fp_add` (add/subtract), `fp_div` and
`fp_sqrt`. These units:

* are combinational;
* round to nearest even;
* flush subnormal inputs and results to zero;
* handle infinities and NaN.

A vendor floating-point core would be a drop-in replacement, with the extra latency absorbed by
the handshakes around each unit. The testbenches compare with double-precision references
rounded to single:

* multiply and add: bit-exact;
* divide and square root: within one ulp;
* accumulated results: within a relative 1e-4.

## 5. Interfaces and timing

Everything is synchronous to `clk`, with an asynchronous active-low `rst_n`. The memory ports are
word (64-bit) addressed:

* **Read port.** `rd_req`/`rd_addr` are held until `rd_gnt`. Data return in request order on
  `rd_valid`/`rd_data` after any latency. The consumer must always accept returned data; the
  stream reader guarantees this by never having more requests outstanding than buffer space.
* **Write port.** `wr_req`/`wr_addr`/`wr_data` are held until `wr_gnt`.

`reap_top` places both engines side by side. They share only clock and reset. Each engine has its
own `start`/`busy`/`done` and memory ports, so both can run at once:

* SpGEMM ports have prefix `sp_`; its `sp_events` are match, overflow, merge, stall, broadcast.
* Cholesky ports have prefix `ch_` and a second read port `ch_lrd_*`; its `ch_events` are
  dependency stall, segment, CAM hit, fill-in.

| parameter       | default | meaning                                           |
|-----------------|---------|---------------------------------------------------|
| `SP_PIPES`      | 32      | SpGEMM pipelines (max A bundles per batch)        |
| `SP_CAM_SIZE`   | 32      | A-bundle size / CAM entries in PE-1               |
| `SP_SORT_DEPTH` | 32      | sorter entries before a run is forced out         |
| `CH_PIPES`      | 32      | Cholesky pipelines (rows per job)                 |
| `CH_MULS`       | 8       | multipliers per dot-product PE                    |
| `CH_CAM_SIZE`   | 32      | row-k segment size / CAM entries                  |

The defaults are the main configuration of the published design: 32 pipelines and bundle size 32,
with 8 multipliers per Cholesky PE. Its larger Cholesky variant is 64 pipelines with 16
multipliers, which is `CH_PIPES = 64, CH_MULS = 16`.

## 6. Where this RTL departs from, or adds to, the published design

The published description gives the block structure, the bundle idea, and the behaviour of each
processing element. The following points are choices made here:

* The bundle bit layout, the `kind` codes, and the `END_BATCH` / `END_ALL` framing bundles.
* The two-FIFO bundle buffer that writes the header at close time.
* The finite sorter depth, and the overflow rule that turns one row into several sorted runs.
  Because of this rule the host has to sum partial rows.
* Matching B rows in PE-1 with one CAM lookup per B bundle, keyed on its shared index.
* Cholesky details:
  * the triple encoding `<R, S, E>` and the address arithmetic around it;
  * splitting long columns into several jobs;
  * segmenting long rows of L through the CAM;
  * computing the diagonal from squares folded into the CAM load;
  * a second memory read port for rows of L.
* The coarse dependency rule between columns: a job starts only after every write of the previous
  job has landed. This is simpler than tracking individual rows, and it costs idle time between
  columns.
* Combinational floating-point units, and a 64-bit memory word per clock per engine. The
  published design uses vendor IP and the board's DDR interface, and neither is part of this RTL.
* The host software (CSR to RIR conversion, symbolic analysis, scheduling, final assembly of C)
  and the board memory are outside the RTL. The testbench packages `tb_spgemm_host_pkg` and
  `tb_chol_host_pkg` contain small reference versions of the host side, and `mem_model` is a
  behavioural memory with random grant delays.

## 7. Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops by itself. Each has a watchdog.

| testbench              | what it covers                                                  |
|------------------------|-----------------------------------------------------------------|
| `tb_fp_mul/add/div/sqrt` | 3000 random plus directed operands against rounded references |
| `tb_cam`               | random writes/clears/lookups, duplicate keys, lowest-slot rule  |
| `tb_rir_bundle_fifo`   | 600 random bundles (empty, long, close with last element), back-pressure |
| `tb_spgemm_match_mul`  | batches of A/B/END bundles, hits and misses                     |
| `tb_spgemm_sort`       | rows up to 3x the depth, stable order, overflow runs             |
| `tb_spgemm_merge`      | accumulation of equal columns, bundle close, back-pressure      |
| `tb_spgemm_top`        | whole SpGEMM engine at 4 pipelines, three random matrices       |
| `tb_chol_dot_product`  | dot products with multi-segment rows                            |
| `tb_chol_div_sqrt`     | diagonal, off-diagonal and fill-in elements                      |
| `tb_chol_top`          | whole Cholesky engine at 4 pipelines/CAM 8, three random SPD matrices |
| `tb_reap_top`          | both engines at full default size, concurrently                 |

`tb_reap_top` checks every element of C and L. It also counts each mechanism and fails if any of
them never happened:

* SpGEMM: CAM matches, sorter overflows, merges, broadcast stalls, broadcasts, split A rows.
* Cholesky: dependency stalls, row segments, CAM hits, fill-ins, split columns.

Example with Verilator 5 (packages first):

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_reap_top \
      rtl/reap_pkg.sv tb/tb_fp_pkg.sv tb/tb_spgemm_host_pkg.sv tb/tb_chol_host_pkg.sv \
      rtl/*.sv tb/mem_model.sv tb/tb_reap_top.sv
    ./obj_dir/Vtb_reap_top

The unit testbenches need only the package, `tb/tb_fp_pkg.sv` and the modules they use. With
`-Irtl -Itb`, Verilator finds the rest by file name. The full-size run takes a few seconds of
wall time: about 6,000 cycles for the SpGEMM of a 64x64 matrix, and 58,000 cycles for a 64x64
Cholesky factorisation with about 1,100 fill-ins.

Verilator simulates two-state logic, so every register that is read is reset or written before
use. Assertions check the handshake rules:

* no write into a full FIFO;
* A bundles that fit the CAM;
* no stream beat during a CAM load;
* jobs no larger than the pipeline count.
