// tb_octree_lookup -- looks up every node of a random octree at its own
// level (must be found, with the right point range and 2 + level cycles),
// and random voxels that hold no points (must be reported not found).
module tb_octree_lookup;
  import hgpcn_pkg::*;
  import tb_cloud_pkg::*;
  localparam int NODES = 4096;
  logic clk = 0, rst_n = 0, start = 0, busy, done, found, rd_en, tb_we = 0;
  mcode_t target = '0;
  logic [LEVEL_W-1:0] level = '0;
  node_static_t node;
  node_idx_t rd_base, tb_idx = '0;
  node_t [FANOUT-1:0] rd_data;
  node_t tb_data = '0;
  int checks = 0, failures = 0;

  octree_lookup dut (.clk, .rst_n, .start, .target_mcode(target), .level, .busy, .done, .found, .node,
                     .tbl_rd_en(rd_en), .tbl_rd_base(rd_base), .tbl_rd_data(rd_data));
  octree_table #(.NODES(NODES)) u_tab (.clk, .rd_en, .rd_base, .rd_data, .wr_en(tb_we), .wr_idx(tb_idx), .wr_data(tb_data));
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic look(mcode_t m, int l, output bit f, output node_static_t n, output int cyc);
    @(negedge clk); start = 1; target = m; level = LEVEL_W'(l);
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    f = found; n = node;
  endtask

  initial begin
    int lvl_of[$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    build(150, 3, 200000, 999);
    foreach (nodes[i]) begin
      @(negedge clk); tb_we = 1; tb_idx = node_idx_t'(i); tb_data = nodes[i];
    end
    @(negedge clk); tb_we = 0;
    // level of each node: count trailing zero triplets is ambiguous, so walk
    lvl_of.delete();
    for (int i = 0; i < nodes.size(); i++) lvl_of.push_back(0);
    for (int i = 0; i < nodes.size(); i++)
      for (int j = 0; j < int'(nodes[i].s.child_num); j++) begin
        int c;
        c = int'(nodes[i].s.child_base) + j;
        lvl_of[c] = lvl_of[i] + 1;
      end
    for (int i = 1; i < nodes.size(); i++) begin
      bit f; node_static_t n; int cyc;
      look(nodes[i].s.mcode, lvl_of[i], f, n, cyc);
      checks += 3;
      if (!f) failures++;
      if (n.pt_addr != nodes[i].s.pt_addr || n.pt_cnt != nodes[i].s.pt_cnt) failures++;
      if (cyc != 2 + lvl_of[i] + 1) begin
        failures++;
        if (failures < 5) $display("node %0d lvl %0d took %0d", i, lvl_of[i], cyc);
      end
    end
    // empty voxels
    for (int t = 0; t < 300; t++) begin
      bit f, present; node_static_t n; int cyc, l;
      mcode_t m;
      l = 1 + $urandom % DEPTH;
      m = mcode_t'({$urandom, $urandom}) & level_mask(LEVEL_W'(l));
      present = 0;
      for (int i = 1; i < nodes.size(); i++) if (lvl_of[i] == l && nodes[i].s.mcode == m) present = 1;
      look(m, l, f, n, cyc);
      checks++;
      if (f != present) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
