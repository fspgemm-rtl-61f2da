// fspgemm_pkg: types and constants shared by the SpGEMM kernel.
//
// The kernel multiplies two sparse single-precision matrices, C = A x B, with
// the row-wise Gustavson algorithm. Three record types travel on its FIFO
// channels and follow the three channel tables of the design:
//   a_ds_t  (QA, load kernel -> PE) one nonzero of A with its scheduling data,
//   b_ds_t  (QB, load kernel -> PE) one SW-wide vector of a row of B,
//   c_ds_t  (QC, PE -> store kernel) one nonzero of C.
// csv_elem_t is one nonzero of A as stored in memory in the compressed sparse
// vector (CSV) format: value, row index and column index.
//
// SW (SIMD width of the multipliers) and NUM_PE (number of processing elements)
// default to 16 and 32, the configuration the design was built in. Values are
// IEEE-754 binary32 and indices 32-bit unsigned, as in the channel tables. The
// NUM field of b_ds_t is an addition of this implementation: it says how many
// of the SW lanes of the last, partly filled vector of a B row are valid.
package fspgemm_pkg;

  localparam int unsigned IDX_W      = 32;
  localparam int unsigned VAL_W      = 32;

  typedef logic [VAL_W-1:0] fp32_t;
  typedef logic [IDX_W-1:0] idx_t;

  // QA record (A_DS).
  typedef struct packed {
    fp32_t val;        // nonzero value of A
    idx_t  b_num_vec;  // number of SW-wide vectors in the matching row of B
    idx_t  a_row_ind;  // row of A, hence row of C
    logic  reset;      // last nonzero of this row of A
  } a_ds_t;

  // QC record (C_DS).
  typedef struct packed {
    fp32_t val;
    idx_t  c_row_ind;
    idx_t  c_col_ind;
  } c_ds_t;

  // One nonzero of A in CSV format.
  typedef struct packed {
    fp32_t val;
    idx_t  row_ind;
    idx_t  col_ind;
  } csv_elem_t;

  // Pair ROW_PTR[j], ROW_PTR[j+1] of the CSR form of B.
  typedef struct packed {
    idx_t lo;
    idx_t hi;
  } ptr_pair_t;

endpackage
