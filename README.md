# FSpGEMM kernel: sparse matrix–matrix multiplication with row sharing

This is synthesizable SystemVerilog for a streaming accelerator that computes
C = A × B for two sparse single-precision matrices. It uses Gustavson's
row-wise method. Row i of C is the sum, over the nonzeros A(i,j) of row i of A,
of A(i,j) times row j of B. Each such product is a short sorted sparse row, and
adding them is a sort-and-merge on column indices. The work is spread over
`NUM_PE` processing elements (PEs), one row of C per PE at a time.

The plain method reads row j of B from memory once for every nonzero A(i,j).
This design does better. It lays A out so that the nonzeros of `NUM_PE`
consecutive rows that share a column sit next to each other in memory. Then
one fetch of row j of B feeds every PE that needs it. The layout is called the
compressed sparse vector (CSV) format. It also lets the A stream be read at
consecutive addresses.

The RTL follows the FSpGEMM architecture (an OpenCL kernel for Intel FPGAs)
wherever that architecture is specified: the block structure, the channel
records, the PE organisation, the sort-and-merge rule and the defaults
`SW = 16` and `NUM_PE = 32`. Where it was not specified, the choices are this
implementation's own. They are listed in "Departures and own choices" below.

## The CSV layout of A

Each nonzero of A is stored as three words: `VAL`, `ROW_IND`, `COL_IND`. The
rows are cut into groups of `NUM_PE` consecutive rows. Each group is called a
CSV vector. A group's nonzeros are stored column by column, and top to bottom
within a column. Groups are stored one after another. Example, a 4 × 4 matrix
with `NUM_PE = 2`:

```
      col 0 1 2 3          storage order   A  B  C  D | E  F  G  H
row 0     A . C .          VAL             A  B  C  D | E  F  G  H
row 1     B . . D          COL_IND         0  0  2  3 | 0  1  2  2
row 2     . F G .          ROW_IND         0  1  0  1 | 3  2  2  3
row 3     E . H .
```

B is stored in ordinary CSR form: `ROW_PTR`, and per nonzero its `VAL` and
`COL_IND`. C is written as a flat list of (`VAL`, row, column) records.

Row r of A and of C belongs to PE number `r mod NUM_PE`. Inside a group, a run
of equal `COL_IND` (A and B above, or G and H) needs the same row of B. That row
is fetched once for the whole run. The fraction of B-row fetches saved,
1 − fetches / nnz(A), is what the `b_row_reads` and `a_sent` counters measure.

## Block structure

```
            +-------------+   QA n  (a_ds_t)   +--------+  QC n (c_ds_t)  +--------------+
 memory --> | load_kernel |------------------->|  pe n  |---------------->| store_kernel | --> memory
 A, ROW_PTR,|             |   QB n  (SW-wide)  |        |   n = 0..NUM_PE-1 |            |     (C)
 B          |             |------------------->|        |                 |              |
            +-------------+   broadcast        +--------+                 +--------------+
```

| module | role |
|---|---|
| `fspgemm_top` | wires one load kernel, `NUM_PE` × (QA, QB, PE, QC) and one store kernel; brings the memory ports out |
| `load_kernel` | reads A and B, builds the QA records, broadcasts rows of B to the PEs that need them |
| `pe` | one row of C at a time: VecMult → SM → double buffer, RESET routing to QC |
| `vecmult_unit` | `SW` parallel single-precision multipliers, one register stage |
| `sm_unit` | merges a product vector into the running row, one element per clock |
| `memory_unit` | two row buffers (value + column RAMs), head/tail pointers, selector S |
| `store_kernel` | round-robin collection from the QC channels, sequential writes |
| `channel_fifo` | first-word-fall-through FIFO used for every QA, QB, QC channel |
| `fp32_mul`, `fp32_add` | binary32 multiplier and adder |
| `fspgemm_pkg` | channel record types and index widths |

The three channel records (`fspgemm_pkg`) are:

* `a_ds_t`, on QA: `val` (nonzero of A), `b_num_vec` (number of `SW`-wide
  vectors the matching row of B occupies), `a_row_ind` (row of A and C) and
  `reset` (this is the last nonzero of its row).
* B vector, on QB: `{num, val[SW], col[SW]}`. `num` counts the valid lanes and
  is below `SW` only in the last vector of a row.
* `c_ds_t`, on QC: `val`, `c_row_ind`, `c_col_ind`.

## Inside a processing element

A PE holds the partial row C(i,:) accumulated so far. It keeps this row as a
list of (value, column) pairs sorted by column, in one of two buffers of the
`memory_unit`. For every QA record (nonzero A(i,j)) the PE goes through these
steps:

1. **STREAM.** It pops the `b_num_vec` vectors of row j of B from QB, one per
   clock when the SM unit can take them. `vecmult_unit` multiplies each vector
   by A(i,j) in `SW` lanes. This gives a sorted vector of up to `SW` products
   with their columns.
2. **Merge.** `sm_unit` walks each product vector with a pointer (`VEC_PTR`)
   against the head of the buffer being read (buffer S). Each clock it emits
   exactly one element:
   * if the buffer column is smaller, the buffer element is emitted and the
     head advances;
   * if the columns are equal, the sum is emitted and both advance;
   * if the vector column is smaller, or the buffer is exhausted, the product
     is emitted and `VEC_PTR` advances.

   The emitted elements come out in column order. They are appended to the
   *other* buffer (!S).
3. **DRAIN.** After the last vector of row j, whatever is left in buffer S has
   a column beyond every product. It is copied out unchanged.
4. **SWAP.** S toggles. The buffer just written becomes the one to read, and
   the old one is emptied.

When the record has `reset = 1`, the emitted elements are finished elements of
C. The demultiplexer after the SM unit sends them to QC as `c_ds_t` instead of
to the buffer. After the swap both buffers are empty and the PE starts its next
row. Rows therefore leave a PE in order, each sorted by column.

The ping-pong between the two buffers means one pass reads one list and writes
another. Nothing is updated in place. In steady state the SM unit handles one
element per clock.

Each buffer is a RAM with a registered read port. `memory_unit` feeds the RAM
with the *next* head address, so the head element is always on its outputs
with no bubble after a pop. A swap is never issued in the same cycle as a
write; this is the reason for the separate SWAP state. If a row of C is longer
than `BUF_DEPTH`, elements are dropped and the sticky `overflow` flag is set.

## Load kernel sequence

For each CSV group of A the load kernel does the following:

1. **Scan.** It reads the `ROW_IND` of every nonzero in the group and records,
   per PE lane, the index of that lane's last nonzero. That nonzero is sent
   with `reset = 1`. A row with no nonzeros produces no records and no output.
2. **Walk.** It reads the nonzeros in order. At each new column j it reads
   `ROW_PTR[j]` and `ROW_PTR[j+1]` and computes
   `b_num_vec = ceil((ROW_PTR[j+1] − ROW_PTR[j]) / SW)`. Each nonzero of the
   run goes as an `a_ds_t` to its own QA, and its lane is added to a mask.
3. **Broadcast.** When the column changes, or the group ends, it reads row j of
   B in `SW`-entry pieces. Each piece is pushed in the same cycle into the QB
   of every masked PE, once all of them have room.

A PE can never wait for a B vector that has not been sent yet, because all B
data of earlier runs are queued before the next run's records. The channels
therefore cannot deadlock, whatever their depths; the tests run them with
depth 2.

## Memory ports and control

The matrices live in external memory, outside this RTL. `fspgemm_top` has
three read ports and one write port:

| port | request | response |
|---|---|---|
| `a_*` | index of a CSV element | `csv_elem_t` {val, row_ind, col_ind} |
| `p_*` | row j of B | `ptr_pair_t` {ROW_PTR[j], ROW_PTR[j+1]} |
| `b_*` | element index into B's CSR arrays | `SW` consecutive values and column indices |
| `c_wr_*` | valid/ready write of one `c_ds_t` at `c_wr_addr` = 0, 1, 2, … | — |

A read is a one-cycle `*_req_valid` pulse with an address. The data come back
any number of cycles later, with `*_rsp_valid`. Each port has one request
outstanding at a time. B entries past the end of a row are returned but
ignored.

To run, set `a_nnz` = nnz(A) and pulse `start` for one cycle. `done` rises once
every element of C has been written, and stays high until the next `start`.
`c_nnz` then holds nnz(C). `a_sent` and `b_row_reads` give the B-row reuse,
and `b_vec_reads` the number of vector reads. Reset is asynchronous and active
low.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `SW` | 16 | multipliers per PE, entries per B vector (original configuration) |
| `NUM_PE` | 32 | processing elements, rows per CSV group (original configuration) |
| `BUF_DEPTH` | 4096 | entries per row buffer: the longest row of C a PE can hold (own choice) |
| `QA_DEPTH`, `QB_DEPTH`, `QC_DEPTH` | 8, 16, 16 | channel FIFO depths (own choice) |

The original sizing rule picks `SW` from the memory bandwidth, about
bandwidth / (4 bytes × clock). It then picks `NUM_PE` as the largest count the
logic allows. `SW = 16`, `NUM_PE = 32` were the result for a 15 GB/s Arria 10
GX board at 236 MHz. The rows of A must be presented in the CSV layout for the
chosen `NUM_PE`.

At the defaults, yosys counts about 32 k word-level cells, 74 k flip-flops and
17 Mbit of buffer RAM (mostly the 32 × 2 × 4096 × 64-bit row buffers).

## Arithmetic

Values are IEEE-754 binary32, rounded to nearest, ties to even. Subnormal
inputs and results are flushed to zero, overflow gives infinity, and NaN is not
treated specially. A column of C that gets several contributions is summed in
the order of increasing column of A, which is the order the nonzeros of a row
arrive in. Results are exact to the bit against a reference that applies the
same order.

## Departures and own choices

* **Sort-and-merge rule.** In the original pseudo-code the equal-column case
  advances only the vector pointer. This would emit the buffered element a
  second time. Here both pointers advance.
* **When S switches.** The original text says the selector switches at the end
  of every iteration of the per-vector loop. Here buffer S is read across all
  `b_num_vec` vectors of one row of B, then drained, then S switches once.
  This is the only order that keeps the merged row sorted.
* **RESET.** How the load kernel knows a nonzero is the last of its row is not
  specified. Here it comes from the per-group pre-scan of `ROW_IND`, which
  costs one extra read per nonzero of A.
* **Vector count.** The `num` field of the B vector record is an addition. It
  marks the valid lanes of the last vector of a row.
* **Throughput.** The load kernel has one memory request outstanding per port.
  It issues each next read in the cycle the previous response or push is
  accepted. With a memory that answers in one cycle, this costs one cycle per
  nonzero of A for the pre-scan, three per nonzero for the walk, and two per B
  vector. The original kernel streams memory continuously. The PEs keep the
  original rate of one element per cycle, but with many PEs the whole kernel is
  bound by the A stream. Cycle counts are therefore not comparable with the
  published runtimes.
* **Adder timing.** The SM unit's compare and adder sit in one combinational
  cycle. An FPGA build at the original 236 MHz would need the adder pipelined,
  with forwarding for back-to-back merges.
* **Output order.** C is written in arrival order across PEs, as flat
  (`VAL`, row, column) records. It is not rearranged into CSV group order.
* **Not included.** The host software (format conversion, buffer allocation,
  kernel launch) and the OpenCL board infrastructure (memory controllers, host
  interface) are not included.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog.

| testbench | what it shows |
|---|---|
| `fp32_mul_tb`, `fp32_add_tb` | ~16 k random and corner-case operations, bit-exact against a double-precision reference rounded once |
| `channel_fifo_tb` | random push/pop against a queue model |
| `vecmult_unit_tb` | products, columns and counts with output stalls; latency of one cycle |
| `memory_unit_tb` | 40 rounds of ping-pong reads and writes, selector, `overflow` |
| `sm_unit_tb` | 300 random merges (many equal columns) including the drain |
| `pe_tb` | 40 rows through one PE with starved inputs and a stalling QC |
| `load_kernel_tb` | per-lane QA/QB streams, RESET placement, one B fetch per group, broadcasts |
| `store_kernel_tb` | every record written once, in per-channel order, at consecutive addresses, fair rotation |
| `fspgemm_top_tb` | four random products at `SW = 4`, `NUM_PE = 4` with depth-2 channels and a stalling write port; it requires every mechanism to occur (broadcast, RESET, merge, swap, drain, partial and empty B rows, QB/QC/write stalls) |
| `fspgemm_full_tb` | one 96×64 · 64×100 product with the top at its default parameters |
| `fspgemm_workload_tb` | at the default parameters, C = A·A for four random banded 128×128 matrices with about 24, 15, 5 and 3 nonzeros per row; checks C and the B-row reuse counters against the count of nonzero CSV vectors |

`spgemm_mem_model` (behavioural, testbench only) stands in for the external
memory. It generates random matrices in CSV/CSR form and computes the expected
C. `fp_ref_pkg` holds the reference arithmetic.

To simulate one testbench with Verilator 5, run from the folder that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module fspgemm_top_tb \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/fspgemm_pkg.sv tb/fp_ref_pkg.sv \
  tb/fspgemm_top_tb.sv
./obj_dir/Vfspgemm_top_tb +verilator+rand+reset+2
```

The full-size testbench builds in about ten seconds and runs in well under a
second (about 8 400 clock cycles).

What has not been checked: timing closure and resource use on an FPGA,
behaviour with NaN or infinite inputs, and rows of C longer than `BUF_DEPTH`
(only the flag is tested). No real matrix collection has been run. The
matrices used in the original evaluation have 14 k to 1 M rows, far too many
to simulate at the RTL level. `fspgemm_workload_tb` matches only their average
number of nonzeros per row, on banded stand-ins; the B-row reuse it reports
(65–92 %) reflects the band and not the real sparsity patterns.
