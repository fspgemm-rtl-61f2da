// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// One of these sits in each of the SW lanes of the VecMult unit. The 24x24-bit
// significand product is normalised by at most one place and rounded to
// nearest, ties to even, using a guard bit and a sticky bit. The number format
// is the design's; the special-case handling is this implementation's choice:
// subnormal inputs count as zero, results below the normal range flush to a
// signed zero, results above it give a signed infinity, and NaN/infinity
// inputs are not treated specially.
//
// Interface: y = a * b, no clock, no handshake.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sign;
  logic [47:0] prod;
  logic [23:0] mant;       // 1.23 after normalisation, before rounding
  logic        guard, sticky, round_up;
  logic [24:0] mant_r;
  logic signed [10:0] exp;

  always_comb begin
    sign = a[31] ^ b[31];
    prod = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    exp  = $signed({3'b000, a[30:23]}) + $signed({3'b000, b[30:23]}) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp    = exp + 11'sd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    round_up = guard & (sticky | mant[0]);
    mant_r   = {1'b0, mant} + {24'd0, round_up};
    if (mant_r[24]) begin
      exp = exp + 11'sd1;
    end
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0 || exp <= 11'sd0) begin
      y = {sign, 31'd0};
    end else if (exp >= 11'sd255) begin
      y = {sign, 8'hFF, 23'd0};
    end else begin
      // When mant_r overflowed its low 23 bits are zero, the right fraction.
      y = {sign, exp[7:0], mant_r[22:0]};
    end
  end
endmodule
