// fspgemm_full_tb: one complete product with the kernel at its default size.
//
// The kernel is instantiated with no parameter overrides: SW = 16 multipliers
// per PE, NUM_PE = 32 PEs, 4096-entry row buffers. A random 96 x 64 matrix A
// (10 % dense, three CSV vectors of 32 rows) times a 64 x 100 matrix B
// (25 % dense, so most rows of B need two 16-wide vectors) is computed once.
// The written C must match the reference exactly, nnz(C) and the number of
// B row fetches must be as expected, and at least one row of B must have been
// shared by several PEs.
module fspgemm_full_tb;
  import fspgemm_pkg::*;
  localparam int SW = 16, NUM_PE = 32;
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
  spgemm_mem_model #(.SW(SW), .NUM_PE(NUM_PE), .MAXN(96), .MAXM(100)) mem (
    .clk, .a_req_valid, .a_req_addr, .a_rsp_valid, .a_rsp_data,
    .p_req_valid, .p_req_addr, .p_rsp_valid, .p_rsp_data,
    .b_req_valid, .b_req_addr, .b_rsp_valid, .b_rsp_val, .b_rsp_col,
    .wr_valid(c_wr_valid && rst_n), .wr_ready(c_wr_ready), .wr_addr(c_wr_addr), .wr_data(c_wr_data));

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c;
    start = 0; a_nnz = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    mem.gen(96, 64, 100, 10, 25, 6);
    @(negedge clk);
    a_nnz = idx_t'(mem.a_csv.size());
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin
      @(posedge clk);
      cycles++;
    end
    repeat (3) @(posedge clk);
    failures += mem.check_c(c);
    checks += c;
    checks++;
    if (int'(c_nnz) != mem.c_exp_nnz || int'(b_row_reads) != mem.groups || overflow) failures++;
    checks++;
    if (b_row_reads >= a_sent) failures++;
    $display("nnz(A) %0d, B row fetches %0d (%0d%% fewer), nnz(C) %0d, %0d cycles",
             a_sent, b_row_reads, 100 * (a_sent - b_row_reads) / a_sent, c_nnz, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
