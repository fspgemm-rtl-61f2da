// pe_tb: one processing element (SW = 4, BUF_DEPTH = 64) computing 40 rows.
//
// For each row the testbench picks 1-6 nonzeros of A in increasing column
// order and, for each, a random row of B over 24 columns (sometimes empty,
// often longer than SW so it spans several vectors). It queues the A_DS
// records (RESET on the last one of the row) and the B_DS vectors on model
// QA/QB channels that go empty at random, and holds QC full at random. The QC
// output must equal the reference rows (sorted columns, values accumulated in
// the same order with the reference arithmetic), row after row. The number of
// merges and of double-buffer swaps is counted; both must be non-zero.
module pe_tb;
  import fspgemm_pkg::*;
  import fp_ref_pkg::*;
  localparam int SW = 4, NW = $clog2(SW + 1), BW = NW + 64 * SW;
  logic clk = 0, rst_n = 0;
  logic qa_empty, qa_pop, qb_empty, qb_pop, qc_full, qc_push, idle, overflow, ev_merge, ev_swap;
  a_ds_t qa_data;
  logic [BW-1:0] qb_data;
  c_ds_t qc_data;
  a_ds_t qaq [$];
  logic [BW-1:0] qbq [$];
  c_ds_t expq [$];
  c_ds_t gotq [$];
  logic gate_a, gate_b;
  int checks = 0, failures = 0, merges = 0, swaps = 0;

  pe #(.SW(SW), .BUF_DEPTH(64)) dut (.*);
  always #5 clk = ~clk;

  assign qa_empty = (qaq.size() == 0) || gate_a;
  assign qa_data  = (qaq.size() > 0) ? qaq[0] : '0;
  assign qb_empty = (qbq.size() == 0) || gate_b;
  assign qb_data  = (qbq.size() > 0) ? qbq[0] : '0;

  // Channel pops are applied at the falling edge, after the PE has sampled
  // the head at the rising edge.
  logic pa, pb;
  always @(posedge clk) begin
    pa <= rst_n && qa_pop;
    pb <= rst_n && qb_pop;
  end
  always @(negedge clk) begin
    if (pa) void'(qaq.pop_front());
    if (pb) void'(qbq.pop_front());
  end
  always @(posedge clk) begin
    if (qc_push) gotq.push_back(qc_data);
    if (ev_merge) merges++;
    if (ev_swap) swaps++;
    gate_a  <= $urandom_range(3) == 0;
    gate_b  <= $urandom_range(3) == 0;
    qc_full <= $urandom_range(3) == 0;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] acc [24];
    bit has [24];
    gate_a = 0; gate_b = 0; qc_full = 0; pa = 0; pb = 0;
    // build the stimulus and the expected output
    for (int row = 0; row < 40; row++) begin
      automatic int na = $urandom_range(6) + 1;
      automatic int col = 0;
      for (int c = 0; c < 24; c++) has[c] = 0;
      for (int e = 0; e < na; e++) begin
        automatic logic [31:0] av = rand_fp(6);
        automatic logic [31:0] bv [$];
        automatic int bc [$];
        automatic int nv;
        for (int c = 0; c < 24; c++)
          if ($urandom_range(99) < 35) begin bv.push_back(rand_fp(6)); bc.push_back(c); end
        nv = (bv.size() + SW - 1) / SW;
        qaq.push_back('{val: av, b_num_vec: idx_t'(nv), a_row_ind: idx_t'(row), reset: (e == na - 1)});
        for (int v = 0; v < nv; v++) begin
          automatic logic [SW-1:0][31:0] vv, vc;
          automatic int cnt = (bv.size() - v * SW < SW) ? bv.size() - v * SW : SW;
          vv = '0; vc = '0;
          for (int l = 0; l < cnt; l++) begin vv[l] = bv[v*SW+l]; vc[l] = bc[v*SW+l]; end
          qbq.push_back({NW'(cnt), vv, vc});
        end
        foreach (bv[p]) begin
          automatic logic [31:0] pr = fmul(av, bv[p]);
          if (has[bc[p]]) acc[bc[p]] = fadd(acc[bc[p]], pr);
          else begin acc[bc[p]] = pr; has[bc[p]] = 1; end
        end
        col++;
      end
      for (int c = 0; c < 24; c++)
        if (has[c]) expq.push_back('{val: acc[c], c_row_ind: idx_t'(row), c_col_ind: idx_t'(c)});
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (gotq.size() < expq.size()) @(posedge clk);
    repeat (20) @(posedge clk);
    foreach (expq[i]) begin
      checks++;
      if (i >= gotq.size() || gotq[i] !== expq[i]) begin
        failures++;
        if (failures < 6) $display("element %0d: got %h expected %h", i, gotq[i], expq[i]);
      end
    end
    checks++; if (gotq.size() != expq.size()) failures++;
    checks++; if (!idle || overflow) failures++;
    checks++; if (merges == 0 || swaps == 0) failures++;
    $display("elements %0d merges %0d swaps %0d", gotq.size(), merges, swaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
