// fspgemm_top: the SpGEMM kernel, C = A x B on sparse single-precision matrices.
//
// A load kernel, NUM_PE processing elements and a store kernel, connected by
// FIFO channels: each PE n has its own QA n (nonzeros of A with scheduling
// data), QB n (vectors of rows of B) and QC n (finished nonzeros of C). PE n
// computes the rows r of C with r mod NUM_PE = n, one at a time, by Gustavson's
// row-wise method; rows of B are fetched once and shared by all PEs that need
// them within a CSV vector of A. This structure and the defaults SW = 16,
// NUM_PE = 32 follow the design; the FIFO depths, the row-buffer depth and the
// port protocol are this implementation's choices.
//
// External memory is not part of the kernel: its read ports for A (CSV
// elements), B's ROW_PTR pairs and B vectors, and its write port for C are
// brought out (see load_kernel and store_kernel for the handshakes). start is
// a one-cycle pulse with a_nnz = nnz(A) valid; done is high once every
// element of C has been written, and c_nnz then holds nnz(C). b_row_reads and
// a_sent give the reuse of B achieved. overflow flags a row of C longer than
// BUF_DEPTH in some PE (that row's result is then incomplete).
module fspgemm_top
  import fspgemm_pkg::*;
#(
  parameter int unsigned SW        = 16,
  parameter int unsigned NUM_PE    = 32,
  parameter int unsigned BUF_DEPTH = 4096,
  parameter int unsigned QA_DEPTH  = 8,
  parameter int unsigned QB_DEPTH  = 16,
  parameter int unsigned QC_DEPTH  = 16,
  localparam int unsigned NW = $clog2(SW + 1),
  localparam int unsigned BW = NW + 64 * SW
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  idx_t                a_nnz,
  output logic                done,
  // A (CSV) read port
  output logic                a_req_valid,
  output idx_t                a_req_addr,
  input  logic                a_rsp_valid,
  input  csv_elem_t           a_rsp_data,
  // B ROW_PTR read port
  output logic                p_req_valid,
  output idx_t                p_req_addr,
  input  logic                p_rsp_valid,
  input  ptr_pair_t           p_rsp_data,
  // B (CSR) vector read port
  output logic                b_req_valid,
  output idx_t                b_req_addr,
  input  logic                b_rsp_valid,
  input  logic [SW-1:0][31:0] b_rsp_val,
  input  logic [SW-1:0][31:0] b_rsp_col,
  // C write port
  output logic                c_wr_valid,
  input  logic                c_wr_ready,
  output idx_t                c_wr_addr,
  output c_ds_t               c_wr_data,
  // status
  output idx_t                c_nnz,
  output idx_t                a_sent,
  output idx_t                b_row_reads,
  output idx_t                b_vec_reads,
  output logic                overflow
);
  logic [NUM_PE-1:0] qa_full, qa_push, qa_empty, qa_pop;
  logic [NUM_PE-1:0] qb_full, qb_push, qb_empty, qb_pop;
  logic [NUM_PE-1:0] qc_full, qc_push, qc_empty, qc_pop;
  a_ds_t             qa_din;
  logic [BW-1:0]     qb_din;
  a_ds_t             qa_dout [NUM_PE];
  logic [BW-1:0]     qb_dout [NUM_PE];
  c_ds_t             qc_din  [NUM_PE];
  c_ds_t             qc_dout [NUM_PE];
  logic [NUM_PE-1:0] pe_idle, pe_ovf, pe_merge, pe_swap;
  logic              load_done;

  load_kernel #(.SW(SW), .NUM_PE(NUM_PE)) u_load (
    .clk, .rst_n, .start, .a_nnz, .done(load_done),
    .a_req_valid, .a_req_addr, .a_rsp_valid, .a_rsp_data,
    .p_req_valid, .p_req_addr, .p_rsp_valid, .p_rsp_data,
    .b_req_valid, .b_req_addr, .b_rsp_valid, .b_rsp_val, .b_rsp_col,
    .qa_full, .qa_push, .qa_data(qa_din),
    .qb_full, .qb_push, .qb_data(qb_din),
    .a_sent, .b_row_reads, .b_vec_reads
  );

  for (genvar n = 0; n < NUM_PE; n++) begin : g_pe
    logic [$bits(a_ds_t)-1:0] qa_raw;
    logic [$bits(c_ds_t)-1:0] qc_raw;

    channel_fifo #(.WIDTH($bits(a_ds_t)), .DEPTH(QA_DEPTH)) u_qa (
      .clk, .rst_n, .push(qa_push[n]), .din(qa_din), .full(qa_full[n]),
      .pop(qa_pop[n]), .dout(qa_raw), .empty(qa_empty[n]), .count()
    );
    assign qa_dout[n] = a_ds_t'(qa_raw);

    channel_fifo #(.WIDTH(BW), .DEPTH(QB_DEPTH)) u_qb (
      .clk, .rst_n, .push(qb_push[n]), .din(qb_din), .full(qb_full[n]),
      .pop(qb_pop[n]), .dout(qb_dout[n]), .empty(qb_empty[n]), .count()
    );

    pe #(.SW(SW), .BUF_DEPTH(BUF_DEPTH)) u_pe (
      .clk, .rst_n,
      .qa_empty(qa_empty[n]), .qa_data(qa_dout[n]), .qa_pop(qa_pop[n]),
      .qb_empty(qb_empty[n]), .qb_data(qb_dout[n]), .qb_pop(qb_pop[n]),
      .qc_full (qc_full[n]),  .qc_push(qc_push[n]), .qc_data(qc_din[n]),
      .idle(pe_idle[n]), .overflow(pe_ovf[n]), .ev_merge(pe_merge[n]), .ev_swap(pe_swap[n])
    );

    channel_fifo #(.WIDTH($bits(c_ds_t)), .DEPTH(QC_DEPTH)) u_qc (
      .clk, .rst_n, .push(qc_push[n]), .din(qc_din[n]), .full(qc_full[n]),
      .pop(qc_pop[n]), .dout(qc_raw), .empty(qc_empty[n]), .count()
    );
    assign qc_dout[n] = c_ds_t'(qc_raw);
  end

  store_kernel #(.NUM_PE(NUM_PE)) u_store (
    .clk, .rst_n, .clear(start),
    .qc_empty, .qc_data(qc_dout), .qc_pop,
    .wr_valid(c_wr_valid), .wr_ready(c_wr_ready), .wr_addr(c_wr_addr), .wr_data(c_wr_data),
    .c_nnz
  );

  assign done     = load_done && (&qa_empty) && (&qb_empty) && (&qc_empty) && (&pe_idle);
  assign overflow = |pe_ovf;
endmodule
