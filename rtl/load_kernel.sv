// load_kernel: reads A and B from memory and feeds the PEs.
//
// A is stored in the compressed sparse vector (CSV) format: its nonzeros as
// (VAL, ROW_IND, COL_IND) triples in vector-major order. A "CSV vector" group
// covers NUM_PE consecutive rows (rows r with the same r / NUM_PE); inside it
// the nonzeros are listed column by column, so all nonzeros of one column of A
// in those rows are adjacent. B is stored in CSR format (ROW_PTR, COL_IND, VAL).
// Row r of A is handled by PE number r mod NUM_PE.
//
// For every CSV vector the kernel
//   1. scans its ROW_IND entries once and records, for each PE lane, the index
//      of the last nonzero of that lane's row: that nonzero gets RESET = 1;
//   2. walks the nonzeros and groups consecutive ones with the same column j;
//      for the first one it reads ROW_PTR[j], ROW_PTR[j+1] and works out
//      B_NUM_VEC = ceil(nnz(B(j,:)) / SW); each nonzero of the group is sent
//      as an A_DS record to the QA channel of its PE;
//   3. reads row j of B once, SW entries per read, and broadcasts each vector
//      to the QB channels of all PEs of the group at once.
// Step 3 is the data-reuse scheme of the design: a row of B is fetched once per
// group instead of once per nonzero of A; b_row_reads counts the fetches, so
// 1 - b_row_reads / nnz(A) is the achieved reduction of B traffic. How RESET
// is found (step 1), the lane mapping and the memory port protocol are this
// implementation's choices.
//
// Memory ports (a_*, p_*, b_*): a one-cycle request pulse with an address, and
// a response some cycles later flagged by *_rsp_valid; one request is
// outstanding at a time. The next one is issued as soon as it is known to be
// needed: with the previous response, or with the push that uses it. a_* returns one CSV element by index, p_* the pair
// ROW_PTR[j], ROW_PTR[j+1], b_* SW consecutive CSR entries (values and column
// indices) from the given element index; entries past the row end are ignored.
// QA/QB are FIFO write sides; a vector is pushed only when every QB of the
// group has room. start (a pulse) begins a run over a_nnz nonzeros; done rises
// when the last record has been pushed and stays high until the next start.
// B_NUM_VEC is a 32-bit field (uint in the A_DS record); being a count divided
// by SW, its top log2(SW) bits are always zero.
module load_kernel
  import fspgemm_pkg::*;
#(
  parameter int unsigned SW     = 16,
  parameter int unsigned NUM_PE = 32,
  localparam int unsigned NW = $clog2(SW + 1),
  localparam int unsigned BW = NW + 64 * SW
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  idx_t                a_nnz,
  output logic                done,
  // A (CSV) read port
  output logic                a_req_valid,
  output idx_t                a_req_addr,
  input  logic                a_rsp_valid,
  input  csv_elem_t           a_rsp_data,
  // B ROW_PTR read port
  output logic                p_req_valid,
  output idx_t                p_req_addr,
  input  logic                p_rsp_valid,
  input  ptr_pair_t           p_rsp_data,
  // B (CSR) vector read port
  output logic                b_req_valid,
  output idx_t                b_req_addr,
  input  logic                b_rsp_valid,
  input  logic [SW-1:0][31:0] b_rsp_val,
  input  logic [SW-1:0][31:0] b_rsp_col,
  // QA channels
  input  logic [NUM_PE-1:0]   qa_full,
  output logic [NUM_PE-1:0]   qa_push,
  output a_ds_t               qa_data,
  // QB channels (broadcast)
  input  logic [NUM_PE-1:0]   qb_full,
  output logic [NUM_PE-1:0]   qb_push,
  output logic [BW-1:0]       qb_data,
  // statistics
  output idx_t                a_sent,
  output idx_t                b_row_reads,
  output idx_t                b_vec_reads
);
  localparam int unsigned LW = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;

  typedef enum logic [3:0] {
    L_IDLE, L_SCAN_REQ, L_SCAN_WAIT, L_A_REQ, L_A_WAIT, L_ELEM,
    L_P_REQ, L_P_WAIT, L_PUSHA, L_BREQ, L_B_WAIT, L_B_PUSH, L_DONE
  } lstate_t;
  lstate_t state;

  idx_t       n_total, k, s, s_end, blk;
  logic       first;
  idx_t       last_idx [NUM_PE];
  csv_elem_t  elem;
  logic       grp_active;
  idx_t       grp_col, b_ptr, b_hi, nvec;
  logic [NUM_PE-1:0] mask;
  logic [SW-1:0][31:0] bv_val, bv_col;
  logic [NW-1:0] bv_num;

  logic [LW-1:0] lane;
  idx_t          rsp_blk;
  idx_t          remain;
  logic          qb_room;
  logic          bv_stall;   // a B vector waits for room in a QB channel
  logic          scan_next, walk_next, bvec_next;

  assign lane    = LW'(elem.row_ind % NUM_PE);
  assign rsp_blk = a_rsp_data.row_ind / NUM_PE;
  assign remain  = b_hi - b_ptr;
  assign qb_room = ((qb_full & mask) == '0);
  assign bv_stall = (state == L_B_PUSH) && !qb_room;

  // A read is issued in the same cycle as the response or push that makes it
  // known to be needed, so the scan takes one cycle per nonzero, the walk
  // three and a B vector two (with a memory that answers in one cycle).
  assign scan_next = (state == L_SCAN_WAIT) && a_rsp_valid && (first || rsp_blk == blk) &&
                     (s + 1'b1 != n_total);
  assign walk_next = (state == L_PUSHA) && !qa_full[lane] && (k + 1'b1 != s_end);
  assign bvec_next = (state == L_B_PUSH) && qb_room && (b_ptr + SW < b_hi);

  always_comb begin
    a_req_valid = (state == L_SCAN_REQ) || (state == L_A_REQ) || scan_next || walk_next;
    a_req_addr  = (state == L_SCAN_REQ) ? s :
                  scan_next             ? s + 1'b1 :
                  walk_next             ? k + 1'b1 : k;
    p_req_valid = (state == L_P_REQ);
    p_req_addr  = grp_col;
    b_req_valid = ((state == L_BREQ) && (b_ptr < b_hi)) || bvec_next;
    b_req_addr  = bvec_next ? b_ptr + SW : b_ptr;
    qa_push     = '0;
    if (state == L_PUSHA && !qa_full[lane]) qa_push[lane] = 1'b1;
    qa_data     = '{val: elem.val, b_num_vec: nvec, a_row_ind: elem.row_ind,
                    reset: (k == last_idx[lane])};
    qb_push     = (state == L_B_PUSH && qb_room) ? mask : '0;
    qb_data     = {bv_num, bv_val, bv_col};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= L_IDLE;
      done        <= 1'b0;
      n_total     <= '0;
      k           <= '0;
      s           <= '0;
      s_end       <= '0;
      blk         <= '0;
      first       <= 1'b0;
      grp_active  <= 1'b0;
      grp_col     <= '0;
      b_ptr       <= '0;
      b_hi        <= '0;
      nvec        <= '0;
      mask        <= '0;
      elem        <= '0;
      bv_num      <= '0;
      a_sent      <= '0;
      b_row_reads <= '0;
      b_vec_reads <= '0;
      for (int i = 0; i < NUM_PE; i++) last_idx[i] <= '0;
    end else begin
      unique case (state)
        L_IDLE, L_DONE: if (start) begin
          done        <= 1'b0;
          n_total     <= a_nnz;
          k           <= '0;
          s           <= '0;
          first       <= 1'b1;
          grp_active  <= 1'b0;
          mask        <= '0;
          a_sent      <= '0;
          b_row_reads <= '0;
          b_vec_reads <= '0;
          state       <= (a_nnz == '0) ? L_DONE : L_SCAN_REQ;
          if (a_nnz == '0) done <= 1'b1;
        end
        // 1. find the last nonzero of every row of this CSV vector
        L_SCAN_REQ: state <= L_SCAN_WAIT;
        L_SCAN_WAIT: if (a_rsp_valid) begin
          if (first || rsp_blk == blk) begin
            if (first) blk <= rsp_blk;
            first <= 1'b0;
            last_idx[a_rsp_data.row_ind % NUM_PE] <= s;
            s <= s + 1'b1;
            if (s + 1'b1 == n_total) begin
              s_end <= s + 1'b1;
              state <= L_A_REQ;
            end else begin
              state <= L_SCAN_WAIT;   // next read issued by scan_next
            end
          end else begin
            s_end <= s;
            state <= L_A_REQ;
          end
        end
        // 2. walk the nonzeros of the CSV vector
        L_A_REQ: state <= L_A_WAIT;
        L_A_WAIT: if (a_rsp_valid) begin
          elem  <= a_rsp_data;
          state <= L_ELEM;
        end
        L_ELEM: begin
          if (grp_active && elem.col_ind == grp_col) state <= L_PUSHA;
          else if (grp_active)                       state <= L_BREQ;
          else begin
            grp_col <= elem.col_ind;
            state   <= L_P_REQ;
          end
        end
        L_P_REQ: state <= L_P_WAIT;
        L_P_WAIT: if (p_rsp_valid) begin
          b_ptr      <= p_rsp_data.lo;
          b_hi       <= p_rsp_data.hi;
          nvec       <= (p_rsp_data.hi - p_rsp_data.lo + SW - 1) / SW;
          grp_active <= 1'b1;
          mask       <= '0;
          state      <= L_PUSHA;
        end
        L_PUSHA: if (!qa_full[lane]) begin
          mask[lane] <= 1'b1;
          k          <= k + 1'b1;
          a_sent     <= a_sent + 1'b1;
          state      <= (k + 1'b1 == s_end) ? L_BREQ : L_A_WAIT;   // walk_next
        end
        // 3. fetch the B row once and broadcast it to the group
        L_BREQ: begin
          if (b_ptr < b_hi) begin
            state <= L_B_WAIT;
          end else begin
            grp_active  <= 1'b0;
            mask        <= '0;
            b_row_reads <= b_row_reads + 1'b1;
            if (k == s_end) begin
              if (k == n_total) begin
                done  <= 1'b1;
                state <= L_DONE;
              end else begin
                s     <= k;
                first <= 1'b1;
                state <= L_SCAN_REQ;
              end
            end else begin
              state <= L_ELEM;
            end
          end
        end
        L_B_WAIT: if (b_rsp_valid) begin
          bv_val      <= b_rsp_val;
          bv_col      <= b_rsp_col;
          bv_num      <= (remain >= SW) ? NW'(SW) : NW'(remain);
          b_vec_reads <= b_vec_reads + 1'b1;
          state       <= L_B_PUSH;
        end
        L_B_PUSH: if (qb_room) begin
          b_ptr <= b_ptr + SW;
          state <= bvec_next ? L_B_WAIT : L_BREQ;
        end
        default: state <= L_IDLE;
      endcase
    end
  end
endmodule
