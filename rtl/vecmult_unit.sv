// vecmult_unit: the vectorised multiplier of a processing element.
//
// Multiplies one nonzero of A (the scalar from the QA channel) by a vector of up
// to SW nonzeros of a row of B (from the QB channel) with SW single-precision
// multipliers working in parallel, one vector per clock. The result is the
// partial-product vector C_TEMP_VEC; the column indices of B (B_VEC_IND) and the
// count of valid lanes travel with it unchanged, since a product lands in the
// column of C of the B element it came from.
//
// Timing: one register stage after the multipliers, so a vector accepted in
// cycle t is offered in cycle t+1. Handshake is valid/ready on both sides;
// in_ready is high when the output register is empty or being emptied. The SW
// parallel multipliers follow the design; the single pipeline stage and the
// handshake are this implementation's choice.
module vecmult_unit #(
  parameter int unsigned SW = 16,
  localparam int unsigned NW = $clog2(SW + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [31:0]          a_val,
  input  logic [SW-1:0][31:0]  b_val,
  input  logic [SW-1:0][31:0]  b_col,
  input  logic [NW-1:0]        b_num,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [SW-1:0][31:0]  prod,
  output logic [SW-1:0][31:0]  cols,
  output logic [NW-1:0]        num
);
  logic [SW-1:0][31:0] p;

  for (genvar i = 0; i < SW; i++) begin : g_lane
    fp32_mul u_mul (.a(a_val), .b(b_val[i]), .y(p[i]));
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      prod <= p;
      cols <= b_col;
      num  <= b_num;
    end
  end
endmodule
