// spgemm_mem_model: behavioural model of the off-chip memory, for testbenches.
//
// Not synthesizable design logic: it stands in for the board's DRAM. It holds
// A in CSV order (VAL, ROW_IND, COL_IND per nonzero, grouped into CSV vectors
// of NUM_PE rows and listed column by column inside each), B in CSR form and
// the written elements of C, answers each read request one cycle later, and
// accepts writes when wr_ready, which is pulled low at random when STALL_PCT
// is non-zero. The task gen() fills it with a random n x k by k x m product,
// gen_band() with the square of a random banded n x n matrix. Both compute
// the expected C with the reference arithmetic, accumulating each column of
// each row in the order the hardware does (increasing column of A).
module spgemm_mem_model
  import fspgemm_pkg::*;
  import fp_ref_pkg::*;
#(
  parameter int SW        = 4,
  parameter int NUM_PE    = 4,
  parameter int MAXN      = 64,
  parameter int MAXM      = 64,
  parameter int STALL_PCT = 0
) (
  input  logic                clk,
  input  logic                a_req_valid,
  input  idx_t                a_req_addr,
  output logic                a_rsp_valid,
  output csv_elem_t           a_rsp_data,
  input  logic                p_req_valid,
  input  idx_t                p_req_addr,
  output logic                p_rsp_valid,
  output ptr_pair_t           p_rsp_data,
  input  logic                b_req_valid,
  input  idx_t                b_req_addr,
  output logic                b_rsp_valid,
  output logic [SW-1:0][31:0] b_rsp_val,
  output logic [SW-1:0][31:0] b_rsp_col,
  input  logic                wr_valid,
  output logic                wr_ready,
  input  idx_t                wr_addr,
  input  c_ds_t               wr_data
);
  // matrices
  int          n, k, m;
  logic [31:0] a_dense [MAXN][MAXN];
  logic        a_nz    [MAXN][MAXN];
  csv_elem_t   a_csv   [$];
  int          row_ptr [$];
  logic [31:0] b_val   [$];
  int          b_col   [$];
  // expected and received C
  logic [31:0] c_exp   [MAXN][MAXM];
  logic        c_has   [MAXN][MAXM];
  int          c_exp_nnz;
  c_ds_t       c_got   [$];
  // statistics of the generated problem
  int          groups;       // distinct (CSV vector, column) pairs
  int          max_row_nnz;  // longest row of C
  int          addr_err = 0; // writes not at the next address

  initial begin
    a_rsp_valid = 0; p_rsp_valid = 0; b_rsp_valid = 0; wr_ready = 1;
  end

  task automatic gen(input int nn, input int kk, input int mm,
                     input int pct_a, input int pct_b, input int espan);
    n = nn; k = kk; m = mm;
    row_ptr.delete(); b_val.delete(); b_col.delete();
    for (int i = 0; i < n; i++)
      for (int j = 0; j < k; j++) begin
        a_nz[i][j]    = ($urandom_range(99) < pct_a);
        a_dense[i][j] = rand_fp(espan);
      end
    // B: CSR
    row_ptr.push_back(0);
    for (int j = 0; j < k; j++) begin
      for (int c = 0; c < m; c++)
        if ($urandom_range(99) < pct_b) begin
          b_val.push_back(rand_fp(espan));
          b_col.push_back(c);
        end
      row_ptr.push_back(b_val.size());
    end
    build_csv_and_c();
  endtask

  // Square banded A (nonzero with probability pct_a where |i-j| <= hb, and
  // always on the diagonal), like a mesh matrix; the product is C = A x A,
  // so B is A itself in CSR form.
  task automatic gen_band(input int nn, input int hb, input int pct_a, input int espan);
    n = nn; k = nn; m = nn;
    row_ptr.delete(); b_val.delete(); b_col.delete();
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        a_nz[i][j]    = (i == j) || ((i - j <= hb) && (j - i <= hb) && ($urandom_range(99) < pct_a));
        a_dense[i][j] = rand_fp(espan);
      end
    row_ptr.push_back(0);
    for (int j = 0; j < n; j++) begin
      for (int c = 0; c < n; c++)
        if (a_nz[j][c]) begin
          b_val.push_back(a_dense[j][c]);
          b_col.push_back(c);
        end
      row_ptr.push_back(b_val.size());
    end
    build_csv_and_c();
  endtask

  // A in CSV order, the group count, and the expected C from a_nz/a_dense
  // and the CSR arrays of B.
  task automatic build_csv_and_c();
    logic [31:0] acc [MAXN][MAXM];
    a_csv.delete(); c_got.delete();
    // CSV: vector-major order
    groups = 0;
    for (int g = 0; g < n; g += NUM_PE)
      for (int j = 0; j < k; j++) begin
        automatic bit any = 0;
        for (int r = g; r < g + NUM_PE && r < n; r++)
          if (a_nz[r][j]) begin
            a_csv.push_back('{val: a_dense[r][j], row_ind: idx_t'(r), col_ind: idx_t'(j)});
            any = 1;
          end
        if (any) groups++;
      end
    // expected C
    c_exp_nnz = 0;
    max_row_nnz = 0;
    for (int i = 0; i < n; i++) begin
      automatic int rn = 0;
      for (int c = 0; c < m; c++) c_has[i][c] = 0;
      for (int j = 0; j < k; j++)
        if (a_nz[i][j])
          for (int p = row_ptr[j]; p < row_ptr[j+1]; p++) begin
            automatic logic [31:0] pr = fmul(a_dense[i][j], b_val[p]);
            if (c_has[i][b_col[p]]) acc[i][b_col[p]] = fadd(acc[i][b_col[p]], pr);
            else begin
              acc[i][b_col[p]] = pr;
              c_has[i][b_col[p]] = 1;
            end
          end
      for (int c = 0; c < m; c++) begin
        c_exp[i][c] = acc[i][c];
        if (c_has[i][c]) begin c_exp_nnz++; rn++; end
      end
      if (rn > max_row_nnz) max_row_nnz = rn;
    end
  endtask

  // Compare what was written against the expectation; returns failures.
  function automatic int check_c(output int checks);
    automatic int fails = 0;
    bit seen [MAXN][MAXM];
    checks = 0;
    for (int i = 0; i < n; i++) for (int c = 0; c < m; c++) seen[i][c] = 0;
    foreach (c_got[x]) begin
      automatic int r = int'(c_got[x].c_row_ind);
      automatic int c = int'(c_got[x].c_col_ind);
      checks++;
      if (r >= n || c >= m || !c_has[r][c] || seen[r][c] || c_got[x].val !== c_exp[r][c]) begin
        fails++;
        if (fails < 5) $display("mismatch: C(%0d,%0d) got %h", r, c, c_got[x].val);
      end else seen[r][c] = 1;
    end
    checks++;
    if (addr_err != 0) begin
      fails++;
      $display("%0d writes out of address sequence", addr_err);
    end
    checks++;
    if (c_got.size() != c_exp_nnz) begin
      fails++;
      $display("nnz(C) got %0d expected %0d", c_got.size(), c_exp_nnz);
    end
    return fails;
  endfunction

  always @(posedge clk) begin
    a_rsp_valid <= a_req_valid;
    if (a_req_valid) a_rsp_data <= (int'(a_req_addr) < a_csv.size()) ? a_csv[a_req_addr] : '0;
    p_rsp_valid <= p_req_valid;
    if (p_req_valid) p_rsp_data <= '{lo: idx_t'(row_ptr[a_req_addr_p(p_req_addr)]),
                                     hi: idx_t'(row_ptr[a_req_addr_p(p_req_addr) + 1])};
    b_rsp_valid <= b_req_valid;
    if (b_req_valid)
      for (int i = 0; i < SW; i++) begin
        automatic int p = int'(b_req_addr) + i;
        b_rsp_val[i] <= (p < b_val.size()) ? b_val[p] : 32'd0;
        b_rsp_col[i] <= (p < b_col.size()) ? idx_t'(b_col[p]) : 32'd0;
      end
    if (wr_valid && wr_ready) begin
      if (int'(wr_addr) != c_got.size()) addr_err++;
      c_got.push_back(wr_data);
    end
    wr_ready <= (STALL_PCT == 0) || ($urandom_range(99) >= STALL_PCT);
  end

  function automatic int a_req_addr_p(input idx_t a);
    return (int'(a) < k) ? int'(a) : 0;
  endfunction
endmodule
