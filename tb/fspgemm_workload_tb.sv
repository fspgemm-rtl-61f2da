// fspgemm_workload_tb: scaled-down stand-ins for the evaluated sparse matrices.
//
// The evaluated matrices (14 K to 1 M rows) are far too large to simulate, so
// each is represented by the square C = A x A of a random banded 128 x 128
// matrix with about the same number of nonzeros per row (dimension x density
// of the original): ~27 (poisson3Da, filter3D), ~16 (2cubes_sphere, cage12,
// offshore), ~6 (scircuit, mac_econ_fwd500) and ~3 (webbase-1M). The band is
// only a structural guess; the real sparsity patterns are not reproduced.
// The kernel runs at its default size (SW = 16, NUM_PE = 32, so four CSV
// vectors of 32 rows), with a stalling write port. For each matrix the written
// C must match the reference exactly, and the B-row reuse counters must give
// the off-chip access reduction of the CSV layout:
//   OMAR = sum over nonzero CSV vectors v of (nnz(v) - 1) / nnz(A)
//        = (a_sent - b_row_reads) / a_sent,
// with the number of nonzero CSV vectors counted independently from A.
module fspgemm_workload_tb;
  import fspgemm_pkg::*;
  localparam int SW = 16, NUM_PE = 32, N = 128;
  logic clk = 0, rst_n = 0;
  logic start, done, overflow;
  idx_t a_nnz, c_nnz, a_sent, b_row_reads, b_vec_reads;
  logic a_req_valid, a_rsp_valid, p_req_valid, p_rsp_valid, b_req_valid, b_rsp_valid;
  idx_t a_req_addr, p_req_addr, b_req_addr, c_wr_addr;
  csv_elem_t a_rsp_data;
  ptr_pair_t p_rsp_data;
  logic [SW-1:0][31:0] b_rsp_val, b_rsp_col;
  logic c_wr_valid, c_wr_ready;
  c_ds_t c_wr_data;
  int checks = 0, failures = 0, cycles = 0;

  fspgemm_top dut (.*);
  spgemm_mem_model #(.SW(SW), .NUM_PE(NUM_PE), .MAXN(N), .MAXM(N), .STALL_PCT(20)) mem (
    .clk, .a_req_valid, .a_req_addr, .a_rsp_valid, .a_rsp_data,
    .p_req_valid, .p_req_addr, .p_rsp_valid, .p_rsp_data,
    .b_req_valid, .b_req_addr, .b_rsp_valid, .b_rsp_val, .b_rsp_col,
    .wr_valid(c_wr_valid && rst_n), .wr_ready(c_wr_ready), .wr_addr(c_wr_addr), .wr_data(c_wr_data));

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // number of nonzero CSV vectors, counted from the dense pattern of A
  function automatic int csv_vectors();
    automatic int v = 0;
    for (int g = 0; g < N; g += NUM_PE)
      for (int j = 0; j < N; j++) begin
        automatic bit any = 0;
        for (int r = g; r < g + NUM_PE; r++) any |= mem.a_nz[r][j];
        v += int'(any);
      end
    return v;
  endfunction

  task automatic run(input string name, input int hb, input int pct);
    int c, nnz_a, v;
    mem.gen_band(N, hb, pct, 6);
    nnz_a = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) nnz_a += int'(mem.a_nz[i][j]);
    v = csv_vectors();
    @(negedge clk);
    a_nnz = idx_t'(mem.a_csv.size());
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done) begin
      @(posedge clk);
      cycles++;
    end
    @(negedge clk);
    failures += mem.check_c(c);
    checks += c;
    checks++;
    if (int'(c_nnz) != mem.c_exp_nnz || overflow) failures++;
    checks++;
    if (int'(a_sent) != nnz_a || int'(b_row_reads) != v) failures++;
    checks++;
    if (int'(a_sent - b_row_reads) * 1000 / int'(a_sent) != (nnz_a - v) * 1000 / nnz_a) failures++;
    $display("%-16s nnz(A) %5d (%0d.%0d per row)  CSV vectors %4d  OMAR %0d.%0d%%  nnz(C) %5d  %0d cycles",
             name, nnz_a, nnz_a / N, (10 * nnz_a / N) % 10, v,
             100 * (a_sent - b_row_reads) / a_sent, (1000 * (a_sent - b_row_reads) / a_sent) % 10,
             c_nnz, cycles);
  endtask

  initial begin
    start = 0; a_nnz = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run("poisson3Da-like", 20, 63);
    run("cage12-like",     12, 62);
    run("scircuit-like",    5, 48);
    run("webbase-like",     3, 33);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
