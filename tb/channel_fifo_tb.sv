// channel_fifo_tb: random push/pop traffic against a queue model.
//
// A DEPTH-4 FIFO is pushed and popped at random (only when allowed by
// full/empty) for 3000 cycles; dout is compared with the model's head, and
// empty, full and count with the model's occupancy, every cycle.
module channel_fifo_tb;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  logic push, pop, full, empty;
  logic [W-1:0] din, dout;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0;

  channel_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

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
      if (failures < 10) $display("%t fifo: %s", $time, what);
    end
  endtask

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == D), "full");
      chk(int'(count) == q.size(), "count");
      if (q.size() > 0) chk(dout == q[0], "data");
      push = !full && ($urandom_range(99) < 55);
      pop  = !empty && ($urandom_range(99) < 50);
      din  = W'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
