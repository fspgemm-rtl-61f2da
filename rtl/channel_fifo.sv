// channel_fifo: synchronous first-word-fall-through FIFO.
//
// Every QA, QB and QC channel of the kernel is one of these. The kernels on the
// two sides are decoupled by it, so that memory reads and writes and PE work can
// proceed at their own pace. The entry at the head is visible on dout whenever
// empty is low; pop removes it at the clock edge, push appends din. Push and pop
// may happen in the same cycle; full and empty are registered-count decodes, so
// neither depends combinationally on the other side's handshake. The depth is a
// parameter (the original tool flow sized these automatically; the defaults in
// the top level are this implementation's). Reset empties the FIFO.
module channel_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;

  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push && !full) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push && !full) wr_ptr <= inc(wr_ptr);
      if (pop && !empty) rd_ptr <= inc(rd_ptr);
      count <= count + (push && !full) - (pop && !empty);
    end
  end

  // Handshake rules: never write a full FIFO, never read an empty one.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
