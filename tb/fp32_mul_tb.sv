// fp32_mul_tb: random and corner-case products against the reference.
//
// Draws operand pairs with exponents within +-20 of 1.0 (products stay normal),
// a batch with exponents spread so that underflow and overflow occur, and zero
// operands, and compares every result bit for bit with the double-precision
// reference rounded once to single precision.
module fp32_mul_tb;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a, .b, .y);

  task automatic check_one(input logic [31:0] x, input logic [31:0] z);
    logic [31:0] e;
    a = x; b = z;
    #1;
    e = fmul(x, z);
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("mul %h * %h = %h expected %h", x, z, y, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) check_one(rand_fp(20), rand_fp(20));
    for (int i = 0; i < 2000; i++) check_one(rand_fp(100), rand_fp(100));
    check_one(32'h3f800000, 32'h3f800000);   // 1 * 1
    check_one(32'h00000000, 32'h40490fdb);   // 0 * pi
    check_one(32'hbfc00000, 32'h40000000);   // -1.5 * 2
    check_one(32'h3f7fffff, 32'h3f800001);   // rounding near 1
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
