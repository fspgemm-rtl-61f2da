// fp32_add_tb: random and corner-case products against the reference.
//
// Draws operand pairs with exponents within +-20 of 1.0 (products stay normal),
// a batch with exponents spread so that underflow and overflow occur, and zero
// operands, and compares every result bit for bit with the double-precision
// reference rounded once to single precision.
module fp32_add_tb;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a, .b, .y);

  task automatic check_one(input logic [31:0] x, input logic [31:0] z);
    logic [31:0] e;
    a = x; b = z;
    #1;
    e = fadd(x, z);
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("add %h + %h = %h expected %h", x, z, y, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) check_one(rand_fp(12), rand_fp(12));
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] x, z;
      x = rand_fp(3);
      z = {~x[31], x[30:23], 23'($urandom)};
      check_one(x, z);                        // near cancellation
      check_one(x, {~x[31], x[30:0]});        // exact cancellation
    end
    for (int i = 0; i < 500; i++) begin
      logic [31:0] x;
      x = rand_fp(3);
      check_one(x, {1'($urandom), x[30:23] - 8'd40, 23'($urandom)});  // far apart
    end
    check_one(32'h3f800000, 32'h3f800000);   // 1 + 1
    check_one(32'h00000000, 32'h40490fdb);   // 0 + pi
    check_one(32'hbfc00000, 32'h00000000);   // -1.5 + 0
    check_one(32'h3f800000, 32'h33800000);   // 1 + 2^-24: tie, rounds to even
    check_one(32'h3f800001, 32'h33800000);   // 1+ulp + 2^-24: tie, rounds up
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
