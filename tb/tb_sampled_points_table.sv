// tb_sampled_points_table -- fills the table in order, checks the count,
// reads every entry back with one cycle of latency, then clears it.
module tb_sampled_points_table;
  import hgpcn_pkg::*;
  localparam int K = 256;
  logic clk = 0, rst_n = 0, clear = 0, we = 0, re = 0;
  logic [$clog2(K)-1:0] widx = '0, ridx = '0;
  paddr_t wdata = '0, rdata;
  logic [$clog2(K):0] count;
  paddr_t ref_q [K];
  int checks = 0, failures = 0;

  sampled_points_table #(.K(K)) dut (.*);
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
    checks++; if (count != 0) failures++;
    for (int i = 0; i < K; i++) begin
      @(negedge clk);
      ref_q[i] = paddr_t'($urandom);
      we = 1; widx = $clog2(K)'(i); wdata = ref_q[i];
    end
    @(negedge clk); we = 0;
    checks++; if (count != ($clog2(K)+1)'(K)) failures++;
    for (int i = K - 1; i >= 0; i--) begin
      @(negedge clk); re = 1; ridx = $clog2(K)'(i);
      @(negedge clk); re = 0;
      checks++; if (rdata != ref_q[i]) failures++;
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    checks++; if (count != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
