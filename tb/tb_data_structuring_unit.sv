// tb_data_structuring_unit -- Voxel-Expanded Gathering against a brute-force
// model.  Random clouds are loaded into an Octree-Table, random central
// points into a Sampled-Points-Table; a host-memory model serves point
// reads with random grant delays, and an accelerator model drains the input
// buffer after a random delay (so the unit must stall).  For every subset
// the testbench checks the size, that every point of the inner rings is
// present, and that the multiset of squared distances equals the one from
// tb_cloud_pkg::veg_ref (ties make the chosen last-ring points themselves
// ambiguous, their distances are not).  It counts how often each mechanism
// occurred: no expansion needed, expansion, chunked merging in the sorter,
// short subsets and input-buffer stalls; each must occur at least once.
module tb_data_structuring_unit;
  import hgpcn_pkg::*;
  import tb_cloud_pkg::*;
  localparam int K = 256, KNN = 32, SORT_N = 64, R_MAX = 4, VL_MAX = 1024, NODES = 8192;
  localparam int KW = $clog2(K), NW = $clog2(KNN);

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [KW:0] n_central = '0;
  logic [LEVEL_W-1:0] ve_level = '0;
  logic [NW:0] knn_k = '0;
  logic spt_re, tb_spt_we = 0;
  logic [KW-1:0] spt_ridx, tb_spt_idx = '0;
  paddr_t spt_rdata, tb_spt_data = '0;
  logic [KW:0] spt_count;
  logic t_rd_en, tb_we = 0;
  node_idx_t t_rd_base, tb_idx = '0;
  node_t [FANOUT-1:0] t_rd_data;
  node_t tb_data = '0;
  logic mem_req, mem_gnt, mem_rvalid;
  paddr_t mem_addr;
  point_t mem_rdata;
  int n_reads;
  logic ob_free, ob_we, ob_commit, ob_short;
  logic [NW-1:0] ob_widx;
  point_t ob_wdata, ob_central;
  logic [NW:0] ob_count;
  logic [2:0] ob_rings;
  logic subset_valid, release_buf = 0;
  logic [NW:0] subset_count;
  point_t subset_central, rd_data;
  logic [NW-1:0] rd_idx = '0;
  int checks = 0, failures = 0;

  data_structuring_unit #(.K(K), .KNN(KNN), .SORT_N(SORT_N), .R_MAX(R_MAX), .VL_MAX(VL_MAX)) dut (
    .clk, .rst_n, .start, .n_central, .ve_level, .knn_k, .busy, .done,
    .spt_re, .spt_ridx, .spt_rdata,
    .tbl_rd_en(t_rd_en), .tbl_rd_base(t_rd_base), .tbl_rd_data(t_rd_data),
    .mem_req, .mem_addr, .mem_gnt, .mem_rvalid, .mem_rdata,
    .ob_free, .ob_we, .ob_widx, .ob_wdata, .ob_commit, .ob_count, .ob_central, .ob_rings, .ob_short
  );
  octree_table #(.NODES(NODES)) u_tab (.clk, .rd_en(t_rd_en), .rd_base(t_rd_base), .rd_data(t_rd_data),
                                       .wr_en(tb_we), .wr_idx(tb_idx), .wr_data(tb_data));
  sampled_points_table #(.K(K)) u_spt (.clk, .rst_n, .clear(1'b0), .we(tb_spt_we), .widx(tb_spt_idx),
                                       .wdata(tb_spt_data), .re(spt_re), .ridx(spt_ridx), .rdata(spt_rdata), .count(spt_count));
  host_mem_model u_mem (.clk, .req(mem_req), .addr(mem_addr), .gnt(mem_gnt), .rvalid(mem_rvalid), .rdata(mem_rdata), .n_reads);
  input_buffer #(.KNN(KNN)) u_ib (.clk, .rst_n, .we(ob_we), .widx(ob_widx), .wdata(ob_wdata), .commit(ob_commit),
                                  .commit_count(ob_count), .commit_central(ob_central), .free(ob_free),
                                  .subset_valid, .subset_count, .subset_central, .rd_idx, .rd_data, .release_buf);
  always #5 clk = ~clk;

  // ---- mechanism counters ----
  int n_stall = 0, n_ring0 = 0, n_expand = 0, n_merge = 0, n_short = 0, n_subsets = 0, sorts_now = 0;
  int cur_lvl = 1, cur_knn = KNN;
  always @(posedge clk) if (rst_n) begin
    if (dut.state.name() == "S_BUF_WAIT" && !ob_free) n_stall++;
    if (dut.state.name() == "S_SORT") sorts_now++;
    if (ob_commit) begin
      if (ob_rings == 0) n_ring0++; else n_expand++;
      if (sorts_now > 1) n_merge++;
      if (ob_short) n_short++;
      sorts_now = 0;
    end
  end

  // ---- accelerator model: drain and check each subset ----
  initial begin
    forever begin
      @(negedge clk);
      if (subset_valid) begin
        point_t got[$];
        int unsigned must[$];
        longint dists[$], gd[$];
        int n_exp, n_ring;
        bit same;
        got.delete(); gd.delete();
        repeat ($urandom % 400) @(negedge clk);
        for (int i = 0; i < int'(subset_count); i++) begin
          rd_idx = NW'(i);
          @(negedge clk);
          got.push_back(rd_data);
          gd.push_back(sqd(rd_data, subset_central));
        end
        n_exp = veg_ref(subset_central, cur_lvl, cur_knn, R_MAX, must, dists, n_ring);
        n_subsets++;
        checks++;
        if (got.size() != n_exp) begin
          failures++;
          if (failures < 6) $display("central %0d: %0d points, exp %0d", subset_central.f, got.size(), n_exp);
        end
        foreach (must[m]) begin
          bit hit;
          hit = 0;
          foreach (got[g]) if (got[g].f == FEAT_W'(must[m])) hit = 1;
          checks++;
          if (!hit) begin
            failures++;
            if (failures < 6) $display("central %0d: inner point %0d missing", subset_central.f, must[m]);
          end
        end
        gd.sort();
        checks++;
        same = (gd.size() == dists.size());
        if (same) foreach (gd[q]) if (gd[q] != dists[q]) same = 0;
        if (!same) begin
          failures++;
          if (failures < 6) $display("central %0d: distance multiset differs", subset_central.f);
        end
        @(negedge clk); release_buf = 1;
        @(negedge clk); release_buf = 0;
      end
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int nleaf, int maxpp, int gap, int lvl, int knn, int nc);
    build(nleaf, maxpp, gap, $urandom % 4096);
    foreach (nodes[i]) begin @(negedge clk); tb_we = 1; tb_idx = node_idx_t'(i); tb_data = nodes[i]; end
    @(negedge clk); tb_we = 0;
    for (int i = 0; i < nc; i++) begin
      @(negedge clk); tb_spt_we = 1; tb_spt_idx = KW'(i); tb_spt_data = paddr_t'($urandom % pts.size());
    end
    @(negedge clk); tb_spt_we = 0;
    cur_lvl = lvl; cur_knn = knn;
    @(negedge clk); start = 1; n_central = (KW+1)'(nc); ve_level = LEVEL_W'(lvl); knn_k = (NW+1)'(knn);
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    while (subset_valid) @(negedge clk);
    repeat (5) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(800, 4, 6, 8, 32, 30);     // dense: a few rings
    run(800, 4, 6, 9, 32, 30);     // finer voxels: more rings, merging
    run(1500, 6, 2, 7, 32, 20);    // very dense: central voxel alone suffices
    run(60, 2, 5000, 9, 32, 10);   // sparse: R_MAX rings fall short
    run(600, 3, 10, 8, 12, 20);    // smaller K
    checks += 5;
    if (n_stall == 0) failures++;
    if (n_ring0 == 0) failures++;
    if (n_expand == 0) failures++;
    if (n_merge == 0) failures++;
    if (n_short == 0) failures++;
    $display("subsets=%0d stall_cycles=%0d no_expansion=%0d expanded=%0d merged=%0d short=%0d",
             n_subsets, n_stall, n_ring0, n_expand, n_merge, n_short);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
