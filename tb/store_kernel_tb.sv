// store_kernel_tb: four QC channels into the output memory port.
//
// Each of the NUM_PE = 4 model QC channels holds 60 records that become
// available at random times; the write port stalls at random. Every record
// must be written exactly once, at consecutive addresses from 0, the records
// of one channel in their original order, c_nnz must count them, and with all
// four channels full the grant must rotate (no channel served twice in a row
// while another waits).
module store_kernel_tb;
  import fspgemm_pkg::*;
  localparam int NUM_PE = 4, PER = 60;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [NUM_PE-1:0] qc_empty, qc_pop;
  c_ds_t qc_data [NUM_PE];
  logic wr_valid, wr_ready;
  idx_t wr_addr, c_nnz;
  c_ds_t wr_data;
  c_ds_t src [NUM_PE][$];
  int next_exp [NUM_PE];
  int avail [NUM_PE];
  int checks = 0, failures = 0, written = 0, last_ch = -1, fair_viol = 0;
  logic [NUM_PE-1:0] popd;

  store_kernel #(.NUM_PE(NUM_PE)) dut (.*);
  always #5 clk = ~clk;

  always_comb
    for (int p = 0; p < NUM_PE; p++) begin
      qc_empty[p] = (avail[p] == 0);
      qc_data[p]  = (src[p].size() > 0) ? src[p][0] : '0;
    end

  always @(posedge clk) begin
    if (rst_n && wr_valid && wr_ready) begin
      automatic int ch = int'(wr_data.c_row_ind) % NUM_PE;
      checks++;
      if (int'(wr_addr) != written || int'(wr_data.c_col_ind) != next_exp[ch]) failures++;
      if (ch == last_ch && $countones(~qc_empty) > 1) fair_viol++;
      last_ch = ch;
      next_exp[ch]++;
      written++;
    end
    popd <= rst_n ? qc_pop : '0;
    wr_ready <= $urandom_range(3) != 0;
  end
  always @(negedge clk)
    for (int p = 0; p < NUM_PE; p++) begin
      if (popd[p]) begin void'(src[p].pop_front()); avail[p]--; end
      if (avail[p] < src[p].size() && $urandom_range(1)) avail[p]++;
    end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    popd = 0; wr_ready = 0;
    for (int p = 0; p < NUM_PE; p++) begin
      avail[p] = 0; next_exp[p] = 0;
      for (int i = 0; i < PER; i++)
        src[p].push_back('{val: $urandom, c_row_ind: idx_t'(p + NUM_PE * $urandom_range(7)), c_col_ind: idx_t'(i)});
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (written < NUM_PE * PER) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++; if (int'(c_nnz) != NUM_PE * PER) failures++;
    checks++; if (wr_valid) failures++;
    checks++; if (fair_viol != 0) failures++;
    $display("written %0d, c_nnz %0d, fairness violations %0d", written, c_nnz, fair_viol);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
