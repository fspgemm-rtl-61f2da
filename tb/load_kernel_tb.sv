// load_kernel_tb: the load kernel (SW = 4, NUM_PE = 4) against the memory model.
//
// Three random problems (12 x 16 A at 30 % density, 16 x 20 B at 35 %) are
// loaded into the memory model. The testbench drains the QA and QB channels
// with random back-pressure and checks, per PE lane, that the A_DS records
// arrive in CSV order with the right value, row, B_NUM_VEC and RESET (RESET
// exactly on the last nonzero of each row), that the B_DS vectors are the
// rows of B each of that lane's nonzeros needs, in order, with the right
// valid count, and that each (CSV vector, column) group fetched its row of B
// exactly once (b_row_reads equals the number of groups). Groups shared by
// more than one PE (broadcasts) are counted and must occur.
module load_kernel_tb;
  import fspgemm_pkg::*;
  localparam int SW = 4, NUM_PE = 4, NW = $clog2(SW + 1), BW = NW + 64 * SW;
  logic clk = 0, rst_n = 0;
  logic start, done;
  idx_t a_nnz;
  logic a_req_valid, a_rsp_valid, p_req_valid, p_rsp_valid, b_req_valid, b_rsp_valid;
  idx_t a_req_addr, p_req_addr, b_req_addr;
  csv_elem_t a_rsp_data;
  ptr_pair_t p_rsp_data;
  logic [SW-1:0][31:0] b_rsp_val, b_rsp_col;
  logic [NUM_PE-1:0] qa_full, qa_push, qb_full, qb_push;
  a_ds_t qa_data;
  logic [BW-1:0] qb_data;
  idx_t a_sent, b_row_reads, b_vec_reads;
  logic wr_ready;
  a_ds_t         got_a [NUM_PE][$];
  logic [BW-1:0] got_b [NUM_PE][$];
  int checks = 0, failures = 0, broadcasts = 0;

  load_kernel #(.SW(SW), .NUM_PE(NUM_PE)) dut (.*);
  spgemm_mem_model #(.SW(SW), .NUM_PE(NUM_PE), .MAXN(32), .MAXM(32)) mem (
    .clk, .a_req_valid, .a_req_addr, .a_rsp_valid, .a_rsp_data,
    .p_req_valid, .p_req_addr, .p_rsp_valid, .p_rsp_data,
    .b_req_valid, .b_req_addr, .b_rsp_valid, .b_rsp_val, .b_rsp_col,
    .wr_valid(1'b0), .wr_ready, .wr_addr('0), .wr_data('0));

  always #5 clk = ~clk;

  always @(posedge clk) begin
    for (int p = 0; p < NUM_PE; p++) begin
      if (qa_push[p]) got_a[p].push_back(qa_data);
      if (qb_push[p]) got_b[p].push_back(qb_data);
    end
    if ($countones(qb_push) > 1) broadcasts++;
    qa_full <= NUM_PE'($urandom);
    qb_full <= NUM_PE'($urandom);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("load kernel: %s", what);
    end
  endtask

  initial begin
    start = 0; a_nnz = 0; qa_full = 0; qb_full = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      mem.gen(12, 16, 20, 30, 35, 6);
      for (int p = 0; p < NUM_PE; p++) begin got_a[p].delete(); got_b[p].delete(); end
      @(negedge clk);
      a_nnz = idx_t'(mem.a_csv.size());
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(posedge clk);
      @(posedge clk);
      // expected per-lane streams
      for (int p = 0; p < NUM_PE; p++) begin
        automatic int ia = 0, ib = 0;
        foreach (mem.a_csv[x]) begin
          automatic csv_elem_t e = mem.a_csv[x];
          automatic int j = int'(e.col_ind);
          automatic int lo = mem.row_ptr[j], hi = mem.row_ptr[j+1];
          automatic int nv = (hi - lo + SW - 1) / SW;
          automatic bit last = 1;
          if (int'(e.row_ind) % NUM_PE != p) continue;
          for (int y = x + 1; y < mem.a_csv.size(); y++)
            if (mem.a_csv[y].row_ind == e.row_ind) last = 0;
          chk(ia < got_a[p].size(), "missing A_DS");
          if (ia < got_a[p].size())
            chk(got_a[p][ia] == '{val: e.val, b_num_vec: idx_t'(nv), a_row_ind: e.row_ind, reset: last},
                $sformatf("A_DS %0d of lane %0d", ia, p));
          ia++;
          for (int v = 0; v < nv; v++) begin
            automatic int cnt = (hi - lo - v * SW < SW) ? hi - lo - v * SW : SW;
            automatic logic [NW-1:0] gn;
            automatic logic [SW-1:0][31:0] gv, gc;
            chk(ib < got_b[p].size(), "missing B_DS");
            if (ib < got_b[p].size()) begin
              {gn, gv, gc} = got_b[p][ib];
              chk(int'(gn) == cnt, "B_DS count");
              for (int l = 0; l < cnt; l++)
                chk(gv[l] == mem.b_val[lo + v*SW + l] && int'(gc[l]) == mem.b_col[lo + v*SW + l], "B_DS lane");
            end
            ib++;
          end
        end
        chk(ia == got_a[p].size() && ib == got_b[p].size(), "extra records");
      end
      chk(int'(b_row_reads) == mem.groups, $sformatf("b_row_reads %0d groups %0d", b_row_reads, mem.groups));
      chk(int'(a_sent) == mem.a_csv.size(), "a_sent");
      $display("run %0d: nnz(A) %0d, B row fetches %0d", run, a_sent, b_row_reads);
    end
    chk(broadcasts > 0, "no shared B row");
    $display("broadcasts %0d", broadcasts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
