// sm_unit: sort-and-merge unit of a processing element.
//
// Adds a sorted sparse partial-product vector (C_TEMP_VEC with its column
// indices B_VEC_IND, up to SW entries, from the VecMult unit) into the sorted
// running row held in the memory unit, producing one element of the merged
// row per clock. Each cycle it compares the column of the buffer head with the
// column of the vector element at VEC_PTR:
//   buffer column smaller  -> emit the buffer element, advance the head;
//   columns equal          -> emit their sum, advance both;
//   vector column smaller, or buffer exhausted -> emit the vector element,
//                             advance VEC_PTR.
// This is the loop of the design's SM pseudo-code, with one correction: when
// the columns are equal the buffer head is advanced as well, otherwise the
// merged buffer element would be emitted again. With drain high and no vector
// held, the remaining buffer elements are copied out unchanged.
//
// Interface: vec_valid/vec_ready take a whole vector (it is held in registers
// while it is walked; the next one is accepted in the cycle its last element
// leaves, so vectors follow each other without a bubble). buf_* is the head of
// the buffer being read; out_valid/out_ready deliver merged elements, and
// nothing advances while out_ready is low. merged pulses for each emitted sum.
// The compare and the adder are combinational within the cycle.
module sm_unit #(
  parameter int unsigned SW = 16,
  localparam int unsigned NW = $clog2(SW + 1),
  localparam int unsigned PTRW = (SW > 1) ? $clog2(SW) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                vec_valid,
  output logic                vec_ready,
  input  logic [SW-1:0][31:0] vec_val,
  input  logic [SW-1:0][31:0] vec_col,
  input  logic [NW-1:0]       vec_num,
  input  logic                drain,
  input  logic                buf_valid,
  input  logic [31:0]         buf_val,
  input  logic [31:0]         buf_col,
  output logic                buf_pop,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [31:0]         out_val,
  output logic [31:0]         out_col,
  output logic                busy,
  output logic                merged
);
  logic                have;
  logic [SW-1:0][31:0] v_val, v_col;
  logic [NW-1:0]       v_num;
  logic [PTRW-1:0]     ptr;

  logic [31:0] cur_val, cur_col, sum;
  logic        adv_vec, fire, last_step, is_merge;

  assign cur_val = v_val[ptr];
  assign cur_col = v_col[ptr];

  fp32_add u_add (.a(buf_val), .b(cur_val), .y(sum));

  always_comb begin
    out_valid = 1'b0;
    out_val   = cur_val;
    out_col   = cur_col;
    adv_vec   = 1'b0;
    is_merge  = 1'b0;
    buf_pop   = 1'b0;
    if (have) begin
      out_valid = 1'b1;
      if (buf_valid && buf_col < cur_col) begin
        out_val = buf_val;
        out_col = buf_col;
        buf_pop = out_ready;
      end else if (buf_valid && buf_col == cur_col) begin
        out_val  = sum;
        is_merge = 1'b1;
        adv_vec  = 1'b1;
        buf_pop  = out_ready;
      end else begin
        adv_vec = 1'b1;
      end
    end else if (drain && buf_valid) begin
      out_valid = 1'b1;
      out_val   = buf_val;
      out_col   = buf_col;
      buf_pop   = out_ready;
    end
    fire      = out_valid && out_ready;
    last_step = fire && adv_vec && (NW'(ptr) == v_num - 1'b1);
    vec_ready = !have || last_step;
    merged    = fire && is_merge;
  end

  assign busy = have;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have <= 1'b0;
      ptr  <= '0;
    end else if (vec_valid && vec_ready) begin
      have <= 1'b1;
      ptr  <= '0;
    end else if (last_step) begin
      have <= 1'b0;
    end else if (fire && adv_vec) begin
      ptr <= ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (vec_valid && vec_ready) begin
      v_val <= vec_val;
      v_col <= vec_col;
      v_num <= vec_num;
    end
  end

  a_nonempty_vector: assert property (@(posedge clk) disable iff (!rst_n)
                                      (vec_valid && vec_ready) |-> (vec_num != '0));
endmodule
