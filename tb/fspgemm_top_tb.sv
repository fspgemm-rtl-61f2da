// fspgemm_top_tb: end-to-end sparse products through the whole kernel.
//
// Reduced configuration: SW = 4, NUM_PE = 4, row buffers of 64 entries and
// two-entry channel FIFOs, so that every channel fills up. The memory model's
// write port refuses writes 30 % of the time. Four random problems are run
// back to back (different sizes and densities, including empty rows of A and
// B). After each, the written C must match the reference element for element
// (exact binary32 values), with no element missing or repeated, nnz(C) must
// be reported, and the number of B row fetches must equal the number of
// (CSV vector, column) groups of A.
//
// The mechanisms of the design are counted over all runs and each must occur:
// a B row broadcast to several PEs, a RESET record, a merge of equal columns,
// a buffer swap, a drain of leftover buffered elements, a partly filled B
// vector, a B row with no nonzeros, and stalls on full QB and QC channels and
// on the write port.
module fspgemm_top_tb;
  import fspgemm_pkg::*;
  localparam int SW = 4, NUM_PE = 4;
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
  int checks = 0, failures = 0;

  // mechanism counters
  int n_bcast = 0, n_reset = 0, n_merge = 0, n_swap = 0, n_drain = 0, n_partial = 0,
      n_empty_brow = 0, n_qb_stall = 0, n_qc_stall = 0, n_wr_stall = 0;

  fspgemm_top #(.SW(SW), .NUM_PE(NUM_PE), .BUF_DEPTH(64),
                .QA_DEPTH(2), .QB_DEPTH(2), .QC_DEPTH(2)) dut (.*);
  spgemm_mem_model #(.SW(SW), .NUM_PE(NUM_PE), .MAXN(32), .MAXM(40), .STALL_PCT(30)) mem (
    .clk, .a_req_valid, .a_req_addr, .a_rsp_valid, .a_rsp_data,
    .p_req_valid, .p_req_addr, .p_rsp_valid, .p_rsp_data,
    .b_req_valid, .b_req_addr, .b_rsp_valid, .b_rsp_val, .b_rsp_col,
    .wr_valid(c_wr_valid && rst_n), .wr_ready(c_wr_ready), .wr_addr(c_wr_addr), .wr_data(c_wr_data));

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if ($countones(dut.qb_push) > 1) n_bcast++;
    if (dut.qa_push != 0 && dut.qa_din.reset) n_reset++;
    if (dut.qb_push != 0 && int'(dut.u_load.bv_num) < SW) n_partial++;
    if (dut.p_rsp_valid && dut.p_rsp_data.lo == dut.p_rsp_data.hi) n_empty_brow++;
    if (|(dut.qb_full & dut.u_load.mask) && dut.u_load.bv_stall) n_qb_stall++;
    if (c_wr_valid && !c_wr_ready) n_wr_stall++;
  end

  for (genvar n = 0; n < NUM_PE; n++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_pe[n].u_pe.ev_merge) n_merge++;
      if (dut.g_pe[n].u_pe.ev_swap) n_swap++;
      if (dut.g_pe[n].u_pe.u_sm.drain && dut.g_pe[n].u_pe.sm_out_valid && dut.g_pe[n].u_pe.sm_out_ready)
        n_drain++;
      if (dut.g_pe[n].u_pe.sm_out_valid && dut.g_pe[n].u_pe.a_q.reset && dut.qc_full[n]) n_qc_stall++;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n, input int k, input int m, input int pa, input int pb);
    int c;
    mem.gen(n, k, m, pa, pb, 6);
    @(negedge clk);
    a_nnz = idx_t'(mem.a_csv.size());
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(posedge clk);
    // C must be complete in memory as soon as done is seen
    @(negedge clk);
    failures += mem.check_c(c);
    checks += c;
    checks++;
    if (int'(c_nnz) != mem.c_exp_nnz || int'(b_row_reads) != mem.groups || overflow) begin
      failures++;
      $display("c_nnz %0d (exp %0d) b_row_reads %0d (exp %0d) overflow %0d",
               c_nnz, mem.c_exp_nnz, b_row_reads, mem.groups, overflow);
    end
    $display("%0dx%0d * %0dx%0d: nnz(A) %0d, B row fetches %0d (%0d%% fewer), nnz(C) %0d",
             n, k, k, m, a_sent, b_row_reads, (a_sent == 0) ? 0 : 100 * (a_sent - b_row_reads) / a_sent,
             c_nnz);
  endtask

  task automatic mech(input string name, input int cnt);
    checks++;
    if (cnt == 0) begin
      failures++;
      $display("mechanism never exercised: %s", name);
    end else $display("%-22s %0d", name, cnt);
  endtask

  initial begin
    start = 0; a_nnz = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(16, 12, 24, 30, 35);
    run(20, 16, 30, 20, 25);
    run(9, 20, 16, 45, 10);
    run(32, 32, 40, 12, 40);
    mech("B row broadcasts", n_bcast);
    mech("RESET records", n_reset);
    mech("merges", n_merge);
    mech("buffer swaps", n_swap);
    mech("drained elements", n_drain);
    mech("partial B vectors", n_partial);
    mech("empty B rows", n_empty_brow);
    mech("QB full stalls", n_qb_stall);
    mech("QC full stalls", n_qc_stall);
    mech("write port stalls", n_wr_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
