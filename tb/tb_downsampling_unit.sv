// tb_downsampling_unit -- runs Octree-Indexed Sampling on random clouds and
// compares the Sampled-Points-Table, entry by entry, with the golden model
// of tb_cloud_pkg.  Also checks that no point is picked twice, the number
// of cycles per picked point (3 + DEPTH + divider cycles), and the
// exhausted flag when more points are asked for than the cloud holds.
module tb_downsampling_unit;
  import hgpcn_pkg::*;
  import tb_cloud_pkg::*;
  localparam int K     = 256;
  localparam int NODES = 4096;
  localparam int KW    = $clog2(K);
  localparam int ROUND = 3 + DEPTH + DEPTH + $clog2(K + 1);

  logic clk = 0, rst_n = 0, start = 0;
  logic [KW:0] k_target = '0, n_picked;
  mcode_t seed_mcode = '0;
  logic busy, done, exhausted;
  logic t_rd_en, o_wr_en, tb_we = 0;
  node_idx_t t_rd_base, o_wr_idx, tb_idx = '0;
  node_t [FANOUT-1:0] t_rd_data;
  node_t o_wr_data, tb_data = '0;
  logic spt_clear, spt_we;
  logic [KW-1:0] spt_widx;
  paddr_t spt_wdata, spt_rdata;
  logic [KW:0] spt_count;
  int checks = 0, failures = 0;

  downsampling_unit #(.K(K)) dut (
    .clk, .rst_n, .start, .k_target, .seed_mcode, .busy, .done, .exhausted, .n_picked,
    .tbl_rd_en(t_rd_en), .tbl_rd_base(t_rd_base), .tbl_rd_data(t_rd_data),
    .tbl_wr_en(o_wr_en), .tbl_wr_idx(o_wr_idx), .tbl_wr_data(o_wr_data),
    .spt_clear, .spt_we, .spt_widx, .spt_wdata
  );
  octree_table #(.NODES(NODES)) u_tab (
    .clk, .rd_en(t_rd_en), .rd_base(t_rd_base), .rd_data(t_rd_data),
    .wr_en(busy ? o_wr_en : tb_we), .wr_idx(busy ? o_wr_idx : tb_idx), .wr_data(busy ? o_wr_data : tb_data)
  );
  sampled_points_table #(.K(K)) u_spt (
    .clk, .rst_n, .clear(spt_clear), .we(spt_we), .widx(spt_widx), .wdata(spt_wdata),
    .re(1'b0), .ridx('0), .rdata(spt_rdata), .count(spt_count)
  );
  always #5 clk = ~clk;

  // record SPT writes and the cycle of each
  int unsigned got[$];
  int          wcyc[$];
  int          cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (spt_we) begin got.push_back(int'(spt_wdata)); wcyc.push_back(cyc); end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_table();
    foreach (nodes[i]) begin
      @(negedge clk); tb_we = 1; tb_idx = node_idx_t'(i); tb_data = nodes[i];
    end
    @(negedge clk); tb_we = 0;
  endtask

  task automatic run(int k, int seed_leaf);
    int unsigned exp[$];
    mcode_t s;
    got.delete(); wcyc.delete();
    s = mcode_t'(leaf_code[seed_leaf]);
    ois_ref(k, s, exp);
    @(negedge clk); start = 1; k_target = (KW+1)'(k); seed_mcode = s;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (got.size() != exp.size() || int'(n_picked) != exp.size()) begin
      failures++;
      $display("count %0d/%0d exp %0d", got.size(), n_picked, exp.size());
    end
    // first pick is the seed leaf's first point
    checks++; if (got.size() > 0 && got[0] != int'(nodes[0].s.pt_addr) && leaf_code[seed_leaf] == leaf_code[0]) failures++;
    for (int i = 0; i < exp.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != exp[i]) begin
        failures++;
        if (failures < 6) $display("pick %0d: got %0d exp %0d", i, got[i], exp[i]);
      end
    end
    // distinct
    begin
      bit seen [int unsigned];
      foreach (got[i]) begin
        checks++;
        if (seen.exists(got[i])) failures++;
        seen[got[i]] = 1;
      end
    end
    // rate: one pick every ROUND cycles
    for (int i = 1; i < wcyc.size(); i++) begin
      checks++;
      if (wcyc[i] - wcyc[i-1] != ROUND) begin
        failures++;
        if (failures < 6) $display("round %0d took %0d cycles, exp %0d", i, wcyc[i] - wcyc[i-1], ROUND);
      end
    end
    checks++;
    if (exhausted != (exp.size() < k)) failures++;
    checks++;
    if (int'(spt_count) != got.size()) failures++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // spread cloud, 200 of ~600 points
    build(300, 3, 3000000, 12345);
    load_table();
    run(200, 17);
    // dense cloud
    build(120, 4, 20, 0);
    load_table();
    run(K, 0);
    // cloud smaller than the request: runs dry
    build(40, 2, 100000, 777);
    load_table();
    run(K, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
