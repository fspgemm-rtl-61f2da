// memory_unit: double buffer for the running output row of a processing element.
//
// Holds the intermediate sum of partial products of the current row of C as a
// sorted list of (VAL, COL_IND) pairs. There are two buffers, each a value RAM
// and a column-index RAM, with head and tail pointers MEM_PTR_HEAD[0..1] and
// MEM_PTR_TAIL[0..1]. The selector S (output sel) names the buffer being read:
// the sort-and-merge unit consumes it from the head while its results are
// appended at the tail of the other buffer. swap toggles S and empties the
// buffer that was read, so the list just written becomes the one to read. This
// double-buffer organisation follows the design.
//
// Timing and interface: rd_valid (head < tail of buffer S), rd_val and rd_col
// always show the head element of buffer S; rd_pop advances the head at the
// clock edge. The RAMs have a registered read port; the address fed to it is
// the next head pointer, so the new head element is on the outputs one cycle
// after a pop or a swap with no bubble (this prefetch is an implementation
// choice). wr_en appends (wr_val, wr_col) to buffer !S. swap and wr_en must
// not be asserted in the same cycle, so that a freshly written entry is in the
// RAM before it is read. A write to a full buffer is dropped and sets the
// sticky overflow flag (the depth and the overflow flag are this
// implementation's choices). Reset empties both buffers and sets S = 0.
module memory_unit #(
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned PW = AW + 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        swap,
  output logic        sel,
  output logic        rd_valid,
  output logic [31:0] rd_val,
  output logic [31:0] rd_col,
  input  logic        rd_pop,
  input  logic        wr_en,
  input  logic [31:0] wr_val,
  input  logic [31:0] wr_col,
  output logic        overflow
);
  logic [PW-1:0] head [2];
  logic [PW-1:0] tail [2];
  logic [PW-1:0] head_d [2];
  logic [31:0]   q_val [2];
  logic [31:0]   q_col [2];
  logic          wsel;
  logic          wr_ok;

  assign wsel     = ~sel;
  assign rd_valid = head[sel] < tail[sel];
  assign rd_val   = q_val[sel];
  assign rd_col   = q_col[sel];
  assign wr_ok    = wr_en && (tail[wsel] != PW'(DEPTH));

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      head_d[b] = head[b];
      if (b == int'(sel)) begin
        if (swap)                     head_d[b] = '0;
        else if (rd_pop && rd_valid)  head_d[b] = head[b] + 1'b1;
      end
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_buf
    logic [31:0] val_ram [DEPTH];
    logic [31:0] col_ram [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_ok && wsel == 1'(b)) begin
        val_ram[tail[b][AW-1:0]] <= wr_val;
        col_ram[tail[b][AW-1:0]] <= wr_col;
      end
    end
    always_ff @(posedge clk) begin
      q_val[b] <= val_ram[head_d[b][AW-1:0]];
      q_col[b] <= col_ram[head_d[b][AW-1:0]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel      <= 1'b0;
      head[0]  <= '0;
      head[1]  <= '0;
      tail[0]  <= '0;
      tail[1]  <= '0;
      overflow <= 1'b0;
    end else begin
      head[0] <= head_d[0];
      head[1] <= head_d[1];
      if (wr_ok) tail[wsel] <= tail[wsel] + 1'b1;
      if (wr_en && !wr_ok) overflow <= 1'b1;
      if (swap) begin
        sel       <= ~sel;
        tail[sel] <= '0;
      end
    end
  end

  a_no_swap_with_write: assert property (@(posedge clk) disable iff (!rst_n) !(swap && wr_en));
endmodule
