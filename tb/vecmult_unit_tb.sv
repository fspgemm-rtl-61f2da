// vecmult_unit_tb: SW = 4 vectors through the multiplier array.
//
// Offers 400 random (scalar, vector) pairs with random gaps, with the output
// side stalled at random; every product vector must come out in order with all
// SW products equal to the reference, its columns and count unchanged, and the
// first vector must appear exactly one cycle after it was accepted.
module vecmult_unit_tb;
  import fp_ref_pkg::*;
  localparam int SW = 4, NW = $clog2(SW + 1);
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [31:0] a_val;
  logic [SW-1:0][31:0] b_val, b_col, prod, cols;
  logic [NW-1:0] b_num, num;
  typedef struct { logic [31:0] a; logic [SW-1:0][31:0] v, c; logic [NW-1:0] n; } item_t;
  item_t q [$];
  int checks = 0, failures = 0, got = 0;
  int t_acc = -1, t_out = -1, cyc = 0;

  vecmult_unit #(.SW(SW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // driver
  initial begin
    in_valid = 0; a_val = 0; b_val = 0; b_col = 0; b_num = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      while ($urandom_range(3) == 0) @(negedge clk);
      in_valid = 1;
      a_val = rand_fp(10);
      for (int l = 0; l < SW; l++) begin
        b_val[l] = rand_fp(10);
        b_col[l] = $urandom;
      end
      b_num = NW'($urandom_range(SW - 1) + 1);
      do @(posedge clk); while (!in_ready);
      if (t_acc < 0) t_acc = cyc;
      q.push_back('{a_val, b_val, b_col, b_num});
      #1 in_valid = 0;
    end
  end

  // monitor
  initial begin
    out_ready = 0;
    @(posedge rst_n);
    while (got < 400) begin
      @(negedge clk);
      out_ready = ($urandom_range(3) != 0) || (t_out < 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        item_t e;
        if (t_out < 0) t_out = cyc;
        e = q.pop_front();
        got++;
        for (int l = 0; l < SW; l++) begin
          checks++;
          if (prod[l] !== fmul(e.a, e.v[l]) || cols[l] !== e.c[l]) begin
            failures++;
            if (failures < 10) $display("vector %0d lane %0d: %h expected %h", got, l, prod[l], fmul(e.a, e.v[l]));
          end
        end
        checks++;
        if (num !== e.n) failures++;
      end
    end
    checks++;
    if (t_out - t_acc != 1) begin
      failures++;
      $display("latency %0d cycles, expected 1", t_out - t_acc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
