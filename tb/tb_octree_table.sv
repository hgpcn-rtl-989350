// tb_octree_table -- writes random entries, then reads groups of eight at
// random (unaligned) bases and compares every entry with a shadow copy;
// also checks one-cycle read latency and read-before-write on a collision.
module tb_octree_table;
  import hgpcn_pkg::*;
  localparam int NODES = 1024;
  logic clk = 0, rd_en = 0, wr_en = 0;
  node_idx_t rd_base = '0, wr_idx = '0;
  node_t [FANOUT-1:0] rd_data;
  node_t wr_data = '0;
  node_t shadow [NODES];
  int checks = 0, failures = 0;

  octree_table #(.NODES(NODES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NODES; i++) begin
      node_t n;
      n = node_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
      shadow[i] = n;
      @(negedge clk); wr_en = 1; wr_idx = node_idx_t'(i); wr_data = n;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 500; t++) begin
      int b;
      b = $urandom % (NODES - FANOUT);
      @(negedge clk); rd_en = 1; rd_base = node_idx_t'(b);
      // write into the group in the same cycle: read must return old data
      wr_en = (t % 3 == 0); wr_idx = node_idx_t'(b + 2); wr_data = ~shadow[b + 2];
      @(negedge clk); rd_en = 0; wr_en = 0;
      for (int j = 0; j < FANOUT; j++) begin
        checks++;
        if (rd_data[j] != shadow[b + j]) begin
          failures++;
          if (failures < 5) $display("group %0d entry %0d mismatch", b, j);
        end
      end
      if (t % 3 == 0) shadow[b + 2] = ~shadow[b + 2];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
