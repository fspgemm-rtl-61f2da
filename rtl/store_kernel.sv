// store_kernel: collects finished elements of C from the PEs and writes them out.
//
// The NUM_PE QC channels are served round robin, one element per clock: the
// first non-empty channel at or after the one after the last served is popped,
// and its c_ds_t record (VAL, row, column) is written to the output memory at
// the next consecutive address. c_nnz counts the elements written. The PEs
// finish rows at different times, which is why each has its own QC FIFO; the
// arbitration order and the flat (VAL, row, column) output layout are this
// implementation's choices.
//
// Interface: qc_empty/qc_data/qc_pop read the FIFOs; wr_valid/wr_ready is the
// memory write handshake (an element is popped only in the cycle it is
// written). clear resets the address and the count for a new run.
module store_kernel
  import fspgemm_pkg::*;
#(
  parameter int unsigned NUM_PE = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic [NUM_PE-1:0]  qc_empty,
  input  c_ds_t              qc_data [NUM_PE],
  output logic [NUM_PE-1:0]  qc_pop,
  output logic               wr_valid,
  input  logic               wr_ready,
  output idx_t               wr_addr,
  output c_ds_t              wr_data,
  output idx_t               c_nnz
);
  localparam int unsigned PIW = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;

  logic [PIW-1:0] last, pick;
  logic           found;

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int k = 1; k <= NUM_PE; k++) begin
      int unsigned idx;
      idx = (int'(last) + k) % NUM_PE;
      if (!found && !qc_empty[idx]) begin
        found = 1'b1;
        pick  = PIW'(idx);
      end
    end
    wr_valid = found;
    wr_data  = qc_data[pick];
    wr_addr  = c_nnz;
    qc_pop   = '0;
    if (found && wr_ready) qc_pop[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last  <= PIW'(NUM_PE - 1);
      c_nnz <= '0;
    end else if (clear) begin
      last  <= PIW'(NUM_PE - 1);
      c_nnz <= '0;
    end else if (found && wr_ready) begin
      last  <= pick;
      c_nnz <= c_nnz + 1'b1;
    end
  end
endmodule
