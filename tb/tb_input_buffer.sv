// tb_input_buffer -- writes subsets, commits them, reads them back from the
// accelerator side and releases them; checks free/subset_valid, the count
// and central point, and that a full buffer refuses the next writes.
module tb_input_buffer;
  import hgpcn_pkg::*;
  localparam int KNN = 32, NW = $clog2(KNN);
  logic clk = 0, rst_n = 0, we = 0, commit = 0, free, subset_valid, release_buf = 0;
  logic [NW-1:0] widx = '0, rd_idx = '0;
  point_t wdata = '0, commit_central = '0, subset_central, rd_data;
  logic [NW:0] commit_count = '0, subset_count;
  point_t ref_q [KNN];
  int checks = 0, failures = 0;

  input_buffer #(.KNN(KNN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 20; s++) begin
      int n;
      point_t c;
      n = 1 + $urandom % KNN;
      c = point_t'({$urandom, $urandom, $urandom});
      checks++; if (!free || subset_valid) failures++;
      for (int i = 0; i < n; i++) begin
        ref_q[i] = point_t'({$urandom, $urandom, $urandom});
        @(negedge clk); we = 1; widx = NW'(i); wdata = ref_q[i];
      end
      @(negedge clk); we = 0; commit = 1; commit_count = (NW+1)'(n); commit_central = c;
      @(negedge clk); commit = 0;
      checks += 3;
      if (free || !subset_valid) failures++;
      if (int'(subset_count) != n) failures++;
      if (subset_central != c) failures++;
      for (int i = 0; i < n; i++) begin
        @(negedge clk); rd_idx = NW'(i);
        @(negedge clk);
        checks++; if (rd_data != ref_q[i]) failures++;
      end
      @(negedge clk); release_buf = 1;
      @(negedge clk); release_buf = 0;
    end
    checks++; if (!free) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
