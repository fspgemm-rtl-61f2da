// fp32_add: combinational IEEE-754 single-precision adder.
//
// Used by the sort-and-merge unit to add two partial products that fall on the
// same column of C. The larger-magnitude operand (lg) is chosen, the other one is
// shifted right into a 27-bit field (24-bit significand, guard, round and a
// sticky bit that collects everything shifted out), the two are added or
// subtracted, the sum is renormalised and rounded to nearest, ties to even.
// Special cases are this implementation's choice: subnormal inputs count as
// zero, results below the normal range flush to zero, exact cancellation gives
// +0, overflow gives infinity, NaN/infinity inputs are not treated specially.
//
// Interface: y = a + b, no clock, no handshake.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic [31:0] lg, sml;
  logic        a_zero, b_zero, sub;
  logic [7:0]  d;
  logic [26:0] mb, ms, ms_sh;
  logic [27:0] s;
  logic [26:0] n;
  logic [4:0]  lz;
  logic        found;
  logic        round_up;
  logic [24:0] mant_r;
  logic signed [10:0] exp;

  always_comb begin
    found  = 1'b0;
    a_zero = (a[30:23] == 8'd0);
    b_zero = (b[30:23] == 8'd0);
    if (a[30:0] >= b[30:0]) begin
      lg = a; sml = b;
    end else begin
      lg = b; sml = a;
    end
    sub   = a[31] ^ b[31];
    d     = lg[30:23] - sml[30:23];
    mb    = {1'b1, lg[22:0], 3'b000};
    ms    = {1'b1, sml[22:0], 3'b000};
    if (d >= 8'd27) begin
      ms_sh = 27'd1;                              // only the sticky bit survives
    end else begin
      ms_sh = ms >> d;
      if ((ms & ((27'd1 << d) - 27'd1)) != 27'd0) ms_sh[0] = 1'b1;
    end
    exp = $signed({3'b000, lg[30:23]});
    if (sub) s = {1'b0, mb} - {1'b0, ms_sh};
    else     s = {1'b0, mb} + {1'b0, ms_sh};
    // Normalise so that n[26] is the leading one.
    n  = s[26:0];
    lz = 5'd0;
    if (s[27]) begin
      n   = {s[27:2], s[1] | s[0]};
      exp = exp + 11'sd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (!found && s[i]) begin
          found = 1'b1;
          lz    = 5'(26 - i);
        end
      end
      n   = s[26:0] << lz;
      exp = exp - $signed({6'd0, lz});
    end
    round_up = n[2] & (n[1] | n[0] | n[3]);
    mant_r   = {1'b0, n[26:3]} + {24'd0, round_up};
    if (mant_r[24]) exp = exp + 11'sd1;

    if (a_zero && b_zero)      y = {a[31] & b[31], 31'd0};
    else if (b_zero)           y = a;
    else if (a_zero)           y = b;
    else if (s == 28'd0)       y = 32'd0;
    else if (exp <= 11'sd0)    y = {lg[31], 31'd0};
    else if (exp >= 11'sd255)  y = {lg[31], 8'hFF, 23'd0};
    else                       y = {lg[31], exp[7:0], mant_r[22:0]};
  end
endmodule
