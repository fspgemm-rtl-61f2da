// sm_unit_tb: merging partial-product vectors into a sorted row (SW = 4).
//
// For 300 trials the testbench builds a sorted running row (the buffer, given
// to the unit as a head element with valid/pop) and a sorted partial-product
// row split into SW-wide vectors, with columns drawn from a small range so
// that many columns coincide. It feeds the vectors back to back, then raises
// drain, with the output stalled at random. The output must be the sorted
// union, equal columns added with the reference adder, and the buffer must be
// fully consumed. Merges are counted to make sure the equal-column path ran.
module sm_unit_tb;
  import fp_ref_pkg::*;
  localparam int SW = 4, NW = $clog2(SW + 1);
  logic clk = 0, rst_n = 0;
  logic vec_valid, vec_ready, drain, buf_valid, buf_pop, out_valid, out_ready, busy, merged;
  logic [SW-1:0][31:0] vec_val, vec_col;
  logic [NW-1:0] vec_num;
  logic [31:0] buf_val, buf_col, out_val, out_col;
  logic [63:0] bq [$];
  int checks = 0, failures = 0, merges = 0;

  sm_unit #(.SW(SW)) dut (.*);
  always #5 clk = ~clk;

  always_comb begin
    buf_valid = bq.size() > 0;
    {buf_val, buf_col} = buf_valid ? bq[0] : 64'd0;
  end
  // The buffer pop is applied at the falling edge, after the unit and the
  // output monitor have sampled the head at the rising edge.
  logic popd = 0;
  always @(posedge clk) begin
    popd <= buf_pop && buf_valid;
    if (merged) merges++;
  end
  always @(negedge clk) if (popd) void'(bq.pop_front());

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] prow [$];
    logic [63:0] exp_q [$];
    logic [63:0] got_q [$];
    vec_valid = 0; drain = 0; out_ready = 0; vec_val = 0; vec_col = 0; vec_num = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic int ib, ip, nv;
      bq.delete(); prow.delete(); exp_q.delete(); got_q.delete();
      for (int c = 0; c < 24; c++) begin
        if ($urandom_range(2) == 0) bq.push_back({rand_fp(6), 32'(c)});
        if ($urandom_range(2) == 0) prow.push_back({rand_fp(6), 32'(c)});
      end
      if (prow.size() == 0) prow.push_back({rand_fp(6), 32'd5});
      // expected merge
      ib = 0; ip = 0;
      while (ib < bq.size() || ip < prow.size()) begin
        if (ip >= prow.size() || (ib < bq.size() && bq[ib][31:0] < prow[ip][31:0])) begin
          exp_q.push_back(bq[ib]); ib++;
        end else if (ib < bq.size() && bq[ib][31:0] == prow[ip][31:0]) begin
          exp_q.push_back({fadd(bq[ib][63:32], prow[ip][63:32]), bq[ib][31:0]}); ib++; ip++;
        end else begin
          exp_q.push_back(prow[ip]); ip++;
        end
      end
      // drive vectors, then drain, collecting the output
      nv = (prow.size() + SW - 1) / SW;
      fork
        begin
          for (int v = 0; v < nv; v++) begin
            @(negedge clk);
            vec_valid = 1;
            vec_num = NW'((prow.size() - v * SW) < SW ? prow.size() - v * SW : SW);
            for (int l = 0; l < SW; l++)
              {vec_val[l], vec_col[l]} = (v * SW + l < prow.size()) ? prow[v * SW + l] : 64'd0;
            do @(posedge clk); while (!vec_ready);
            #1 vec_valid = 0;
          end
          while (busy) @(posedge clk);
          #1 drain = 1;
          while (bq.size() > 0) @(posedge clk);
          #1 drain = 0;
        end
        begin
          while (got_q.size() < exp_q.size()) begin
            @(negedge clk);
            out_ready = $urandom_range(3) != 0;
            @(posedge clk);
            if (out_valid && out_ready) got_q.push_back({out_val, out_col});
          end
          @(negedge clk) out_ready = 0;
        end
      join
      repeat (2) @(posedge clk);
      checks++;
      if (got_q != exp_q || out_valid || bq.size() != 0) begin
        failures++;
        if (failures < 5) $display("trial %0d: got %0d elements, expected %0d", t, got_q.size(), exp_q.size());
      end
    end
    checks++;
    if (merges == 0) failures++;
    $display("merges: %0d", merges);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
