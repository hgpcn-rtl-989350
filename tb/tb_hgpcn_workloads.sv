// tb_hgpcn_workloads -- the benchmark sample counts that fit the default
// configuration, run end to end with no parameter override on the top.
//   * part-segmentation size: a cloud of fewer than 4096 points sampled to
//     2048, with the 32 nearest neighbours gathered for every sample;
//   * classification size: a cloud of about 18000 points sampled to 1024,
//     with 32 neighbours gathered for every sample.
// The clouds are random surfaces of the right point count, not the
// benchmark data.  Checks are those of tb_hgpcn_top: status, sampling time,
// sampled order against the golden sampler and every subset against the
// brute-force gathering model.
module tb_hgpcn_workloads;
  import hgpcn_pkg::*;
  import tb_cloud_pkg::*;
  localparam int K = 4096, KNN = 32, R_MAX = 4;
  localparam int SUM_W = DEPTH + $clog2(K + 1);
  localparam int ROUND = 3 + DEPTH + SUM_W;
  localparam int DLA_WAIT = 800;
  localparam int WATCHDOG = 60000000;

  logic clk = 0, rst_n = 0;
  logic mmio_we = 0, mmio_re = 0, mmio_rvalid;
  logic [3:0] mmio_addr = '0;
  logic [63:0] mmio_wdata = '0, mmio_rdata;
  logic mem_req, mem_gnt, mem_rvalid;
  paddr_t mem_addr;
  point_t mem_rdata;
  int n_reads;
  logic subset_valid, dla_release = 0, ois_done, dsu_done;
  logic [$clog2(KNN):0] subset_count;
  point_t subset_central, dla_rd_data;
  logic [$clog2(KNN)-1:0] dla_rd_idx = '0;
  int checks = 0, failures = 0;

  hgpcn_top dut (
    .clk, .rst_n, .mmio_we, .mmio_re, .mmio_addr, .mmio_wdata, .mmio_rdata, .mmio_rvalid,
    .mem_req, .mem_addr, .mem_gnt, .mem_rvalid, .mem_rdata,
    .subset_valid, .subset_count, .subset_central, .dla_rd_idx, .dla_rd_data, .dla_release,
    .ois_done, .dsu_done
  );
  host_mem_model u_mem (.clk, .req(mem_req), .addr(mem_addr), .gnt(mem_gnt), .rvalid(mem_rvalid),
                        .rdata(mem_rdata), .n_reads);
  always #5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures <= 8) $display("FAIL: %s", msg);
  endtask

  // ---- mechanism counters ----
  int n_rounds = 0, n_exhaust = 0, n_ring0 = 0, n_expand = 0, n_merge = 0, n_short = 0;
  int n_stall = 0, n_tbl_wr = 0, sorts_now = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ois.spt_we) n_rounds++;
    if (dut.u_dsu.state.name() == "S_BUF_WAIT" && !dut.u_ibuf.free) n_stall++;
    if (dut.u_dsu.state.name() == "S_SORT") sorts_now++;
    if (dut.u_mmio.tbl_we) n_tbl_wr++;
    if (dut.u_dsu.ob_commit) begin
      if (dut.u_dsu.ob_rings == 0) n_ring0++; else n_expand++;
      if (sorts_now > 1) n_merge++;
      if (dut.u_dsu.ob_short) n_short++;
      sorts_now = 0;
    end
  end

  // ---- MMIO host model ----
  task automatic mw(int a, logic [63:0] d);
    @(negedge clk); mmio_we = 1; mmio_addr = 4'(a); mmio_wdata = d;
    @(negedge clk); mmio_we = 0;
  endtask
  task automatic mr(int a, output logic [63:0] d);
    @(negedge clk); mmio_re = 1; mmio_addr = 4'(a);
    @(negedge clk); mmio_re = 0;
    while (!mmio_rvalid) @(negedge clk);
    d = mmio_rdata;
  endtask

  // ---- accelerator model: drains and checks subsets ----
  int unsigned picked[$];
  int cur_lvl = 1, cur_knn = KNN, sub_idx = 0;
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
        repeat ($urandom % DLA_WAIT) @(negedge clk);
        for (int i = 0; i < int'(subset_count); i++) begin
          dla_rd_idx = ($clog2(KNN))'(i);
          @(negedge clk);
          got.push_back(dla_rd_data);
          gd.push_back(sqd(dla_rd_data, subset_central));
        end
        checks++;
        if (sub_idx >= picked.size() || subset_central.f != FEAT_W'(picked[sub_idx]))
          fail($sformatf("subset %0d centred on point %0d", sub_idx, subset_central.f));
        n_exp = veg_ref(subset_central, cur_lvl, cur_knn, R_MAX, must, dists, n_ring);
        checks++;
        if (got.size() != n_exp) fail($sformatf("subset %0d: %0d points, expected %0d", sub_idx, got.size(), n_exp));
        foreach (must[m]) begin
          bit hit;
          hit = 0;
          foreach (got[g]) if (got[g].f == FEAT_W'(must[m])) hit = 1;
          checks++;
          if (!hit) fail($sformatf("subset %0d: inner point %0d missing", sub_idx, must[m]));
        end
        gd.sort();
        same = (gd.size() == dists.size());
        if (same) foreach (gd[q]) if (gd[q] != dists[q]) same = 0;
        checks++;
        if (!same) fail($sformatf("subset %0d: distances differ", sub_idx));
        sub_idx++;
        @(negedge clk); dla_release = 1;
        @(negedge clk); dla_release = 0;
      end
    end
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one frame: build, load, sample, structure
  task automatic frame(int nleaf, int maxpp, int gap, int k, int lvl, int knn, int nc);
    logic [63:0] st;
    mcode_t seed;
    int t0, t1, n_exp;
    build(nleaf, maxpp, gap, $urandom % 4096);
    foreach (nodes[i]) begin
      mw(7, {nodes[i].s.pt_addr, nodes[i].s.pt_cnt, nodes[i].s.child_base});
      mw(8, {29'd0, nodes[i].s.mcode, nodes[i].s.is_leaf, nodes[i].s.child_num});
      mw(9, 64'(i));
    end
    seed = mcode_t'(leaf_code[$urandom % leaf_code.size()]);
    ois_ref(k, seed, picked);
    n_exp = picked.size();
    mw(2, 64'(k));
    mw(3, 64'(seed));
    t0 = int'($time / 10);
    mw(0, 64'd1);
    do mr(1, st); while (!st[1]);
    t1 = int'($time / 10);
    checks += 4;
    if (st[0]) fail("OIS still busy after done");
    if (st[2] != (n_exp < k)) fail("ran-out flag");
    if (int'(st[47:32]) != n_exp) fail($sformatf("SPT count %0d, expected %0d", st[47:32], n_exp));
    if (t1 - t0 > n_exp * ROUND + 40 || t1 - t0 < n_exp * (DEPTH + 1))
      fail($sformatf("sampling took %0d cycles for %0d points (round %0d)", t1 - t0, n_exp, ROUND));
    if (st[2]) n_exhaust++;
    if (nc > n_exp) nc = n_exp;
    cur_lvl = lvl; cur_knn = knn; sub_idx = 0;
    mw(4, 64'(nc));
    mw(5, 64'(lvl));
    mw(6, 64'(knn));
    mw(0, 64'd2);
    do mr(1, st); while (!st[4]);
    while (subset_valid) @(negedge clk);
    repeat (10) @(negedge clk);
    checks++;
    if (sub_idx != nc) fail($sformatf("%0d subsets, expected %0d", sub_idx, nc));
    $display("frame: %0d points, %0d nodes, %0d sampled in %0d cycles, %0d subsets",
             pts.size(), nodes.size(), n_exp, t1 - t0, sub_idx);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    frame(1200, 3, 40, 2048, 8, 32, 2048);
    checks++;
    if (pts.size() >= 4096) fail("part-segmentation cloud too large");
    frame(12000, 2, 20, 1024, 8, 32, 1024);
    checks += 2;
    if (n_rounds != 2048 + 1024) fail("sampling rounds");
    if (n_tbl_wr == 0) fail("no table write");
    $display("rounds=%0d ran_out=%0d no_expansion=%0d expanded=%0d merged=%0d short=%0d stall_cycles=%0d table_writes=%0d",
             n_rounds, n_exhaust, n_ring0, n_expand, n_merge, n_short, n_stall, n_tbl_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
