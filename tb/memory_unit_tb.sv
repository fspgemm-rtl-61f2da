// memory_unit_tb: double-buffer ping-pong with a DEPTH-16 memory unit.
//
// Round 0 writes a list into buffer 1 (S = 0), swaps, then reads it back
// through the head port with random pops while the next list is written into
// the other buffer; this repeats for 40 rounds with lists of random length.
// Every element read must be the one written, rd_valid must fall exactly when
// the list is exhausted, S must toggle on each swap, and a 17th write into a
// full buffer must raise overflow.
module memory_unit_tb;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  logic swap, sel, rd_valid, rd_pop, wr_en, overflow;
  logic [31:0] rd_val, rd_col, wr_val, wr_col;
  logic [63:0] wq [$];   // list being written
  logic [63:0] rq [$];   // list being read
  int checks = 0, failures = 0;

  memory_unit #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%t memory unit: %s", $time, what);
    end
  endtask

  initial begin
    int len;
    logic exp_sel;
    swap = 0; rd_pop = 0; wr_en = 0; wr_val = 0; wr_col = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    exp_sel = 0;
    for (int round = 0; round < 40; round++) begin
      len = $urandom_range(D);
      // read rq while writing a new list of len entries
      while (rq.size() > 0 || wq.size() < len) begin
        @(negedge clk);
        chk(sel == exp_sel, "S");
        chk(rd_valid == (rq.size() > 0), "rd_valid");
        if (rq.size() > 0) chk({rd_val, rd_col} == rq[0], "read data");
        rd_pop = rq.size() > 0 && $urandom_range(1);
        wr_en  = wq.size() < len && $urandom_range(1);
        wr_val = $urandom; wr_col = $urandom;
        @(posedge clk); #1;
        if (rd_pop) void'(rq.pop_front());
        if (wr_en) wq.push_back({wr_val, wr_col});
        rd_pop = 0; wr_en = 0;
      end
      @(negedge clk);
      chk(!rd_valid, "rd_valid after list");
      swap = 1;
      @(posedge clk); #1;
      swap = 0;
      exp_sel = ~exp_sel;
      rq = wq;
      wq.delete();
    end
    chk(!overflow, "no overflow yet");
    // overflow: D + 1 writes
    @(negedge clk);
    for (int i = 0; i <= D; i++) begin
      wr_en = 1; @(posedge clk); #1;
    end
    wr_en = 0;
    @(negedge clk);
    chk(overflow, "overflow flag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
