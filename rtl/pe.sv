// pe: processing element of the SpGEMM kernel; computes one row of C at a time.
//
// For every nonzero A(i,j) that arrives on its QA channel (an a_ds_t record)
// the PE takes the B_NUM_VEC vectors of row j of B from its QB channel,
// multiplies them by A(i,j) in the VecMult unit and merges the products into
// the sorted running row C(i,:) kept in the double-buffered memory unit, using
// the sort-and-merge (SM) unit. Once all vectors are merged, the rest of the
// buffer being read is copied out (drain), and the buffers swap roles. Every
// merged element goes either into the other buffer, or, when the record's
// RESET flag says this was the last nonzero of row i, out to the QC channel as
// a finished element (VAL, row i, column) of C. After a RESET record both
// buffers are empty and the PE is ready for its next row.
//
// Control: IDLE (wait for QA) -> STREAM (feed QB vectors to VecMult until
// B_NUM_VEC are in and merged) -> DRAIN (copy the rest of the buffer) -> SWAP
// (toggle the buffer selector) -> IDLE. The per-record sequence and the RESET
// routing follow the design; the state encoding, the one-cycle SWAP state
// (which keeps the buffer write and the swap in different cycles) and the
// FIFO-style channel ports are this implementation's choices.
//
// Channel ports: qa/qb are the read side of first-word-fall-through FIFOs
// (data valid while !empty, pop to consume); qc is the write side (push when
// !full). Throughput is one merged element per cycle once a vector is loaded.
module pe
  import fspgemm_pkg::*;
#(
  parameter int unsigned SW        = 16,
  parameter int unsigned BUF_DEPTH = 4096,
  localparam int unsigned NW = $clog2(SW + 1),
  localparam int unsigned BW = NW + 64 * SW
) (
  input  logic          clk,
  input  logic          rst_n,
  // QA channel
  input  logic          qa_empty,
  input  a_ds_t         qa_data,
  output logic          qa_pop,
  // QB channel: {num, val[SW], col[SW]}
  input  logic          qb_empty,
  input  logic [BW-1:0] qb_data,
  output logic          qb_pop,
  // QC channel
  input  logic          qc_full,
  output logic          qc_push,
  output c_ds_t         qc_data,
  // status
  output logic          idle,
  output logic          overflow,
  output logic          ev_merge,
  output logic          ev_swap
);
  typedef enum logic [1:0] {S_IDLE, S_STREAM, S_DRAIN, S_SWAP} state_t;
  state_t state;

  a_ds_t a_q;
  idx_t  vec_cnt;

  // QB record fields
  logic [NW-1:0]       qb_num;
  logic [SW-1:0][31:0] qb_val, qb_col;
  assign {qb_num, qb_val, qb_col} = qb_data;

  // VecMult <-> SM
  logic                vm_in_valid, vm_in_ready, vm_out_valid, vm_out_ready;
  logic [SW-1:0][31:0] vm_prod, vm_cols;
  logic [NW-1:0]       vm_num;

  // SM <-> memory unit and outputs
  logic        sm_busy, sm_out_valid, sm_out_ready, sm_buf_pop, sm_merged;
  logic [31:0] sm_out_val, sm_out_col;
  logic        mu_rd_valid, mu_swap, mu_wr_en, mu_sel;
  logic [31:0] mu_rd_val, mu_rd_col;

  assign vm_in_valid = (state == S_STREAM) && (vec_cnt < a_q.b_num_vec) && !qb_empty;
  assign qb_pop      = vm_in_valid && vm_in_ready;
  assign qa_pop      = (state == S_IDLE) && !qa_empty;

  vecmult_unit #(.SW(SW)) u_vecmult (
    .clk, .rst_n,
    .in_valid (vm_in_valid), .in_ready (vm_in_ready),
    .a_val    (a_q.val),     .b_val    (qb_val), .b_col (qb_col), .b_num (qb_num),
    .out_valid(vm_out_valid),.out_ready(vm_out_ready),
    .prod     (vm_prod),     .cols     (vm_cols), .num  (vm_num)
  );

  sm_unit #(.SW(SW)) u_sm (
    .clk, .rst_n,
    .vec_valid(vm_out_valid), .vec_ready(vm_out_ready),
    .vec_val  (vm_prod),      .vec_col  (vm_cols),   .vec_num(vm_num),
    .drain    (state == S_DRAIN),
    .buf_valid(mu_rd_valid),  .buf_val  (mu_rd_val), .buf_col(mu_rd_col), .buf_pop(sm_buf_pop),
    .out_valid(sm_out_valid), .out_ready(sm_out_ready),
    .out_val  (sm_out_val),   .out_col  (sm_out_col),
    .busy     (sm_busy),      .merged   (sm_merged)
  );

  // RESET demultiplexer: finished elements to QC, others back to the buffer.
  assign sm_out_ready = a_q.reset ? !qc_full : 1'b1;
  assign qc_push      = sm_out_valid && sm_out_ready && a_q.reset;
  assign mu_wr_en     = sm_out_valid && sm_out_ready && !a_q.reset;
  assign qc_data      = '{val: sm_out_val, c_row_ind: a_q.a_row_ind, c_col_ind: sm_out_col};
  assign mu_swap      = (state == S_SWAP);

  memory_unit #(.DEPTH(BUF_DEPTH)) u_mem (
    .clk, .rst_n,
    .swap    (mu_swap),    .sel     (mu_sel),
    .rd_valid(mu_rd_valid),.rd_val  (mu_rd_val), .rd_col(mu_rd_col), .rd_pop(sm_buf_pop),
    .wr_en   (mu_wr_en),   .wr_val  (sm_out_val),.wr_col(sm_out_col),
    .overflow(overflow)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      a_q     <= '0;
      vec_cnt <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (qa_pop) begin
          a_q     <= qa_data;
          vec_cnt <= '0;
          state   <= S_STREAM;
        end
        S_STREAM: begin
          if (qb_pop) vec_cnt <= vec_cnt + 1'b1;
          if (vec_cnt == a_q.b_num_vec && !vm_out_valid && !sm_busy) state <= S_DRAIN;
        end
        S_DRAIN: if (!mu_rd_valid) state <= S_SWAP;
        S_SWAP:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign idle     = (state == S_IDLE);
  assign ev_merge = sm_merged;
  assign ev_swap  = mu_swap;
endmodule
