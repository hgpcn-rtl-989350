// hgpcn_top -- FPGA side of the HgPCN point-cloud accelerator.
//
// The host CPU builds an octree of the raw point cloud, stores the points
// in host memory in space-filling-curve order and loads the Octree-Table
// over MMIO.  Then:
//   1. the down-sampling unit samples k_target points by walking the
//      Octree-Table (Octree-Indexed Sampling) and writes their host
//      addresses to the Sampled-Points-Table, without reading any point;
//   2. the data structuring unit takes the first n_central sampled points
//      as central points, gathers the knn_k nearest points of each by
//      voxel expansion over the same Octree-Table, reading point records
//      from host memory, and hands each point-subset to the input buffer;
//   3. the feature computation unit, a deep-learning accelerator outside
//      this design, reads the subset from the input buffer and releases it.
// Both engines share the Octree-Table: the down-sampling unit owns its read
// and write ports while it is busy, the data structuring unit reads it
// otherwise, and MMIO table writes are taken while the down-sampling unit
// is idle (writes during sampling are dropped).
//
// Ports: MMIO (64-bit words, see mmio_regs), one host-memory read channel
// (request held until mem_gnt, one mem_rvalid beat with the point record),
// and the accelerator side of the input buffer.  ois_done / dsu_done pulse
// when an engine finishes.
module hgpcn_top
  import hgpcn_pkg::*;
#(
  parameter int NODES  = 65536,
  parameter int K      = 4096,
  parameter int KNN    = 32,
  parameter int SORT_N = 64,
  parameter int R_MAX  = 4,
  parameter int VL_MAX = 1024
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // MMIO from the host
  input  logic                   mmio_we,
  input  logic                   mmio_re,
  input  logic [3:0]             mmio_addr,
  input  logic [63:0]            mmio_wdata,
  output logic [63:0]            mmio_rdata,
  output logic                   mmio_rvalid,
  // host memory read channel
  output logic                   mem_req,
  output paddr_t                 mem_addr,
  input  logic                   mem_gnt,
  input  logic                   mem_rvalid,
  input  point_t                 mem_rdata,
  // feature computation unit side of the input buffer
  output logic                   subset_valid,
  output logic [$clog2(KNN):0]   subset_count,
  output point_t                 subset_central,
  input  logic [$clog2(KNN)-1:0] dla_rd_idx,
  output point_t                 dla_rd_data,
  input  logic                   dla_release,
  // completion
  output logic                   ois_done,
  output logic                   dsu_done
);
  localparam int KW = $clog2(K);

  // ---- MMIO ----
  logic               ois_start, dsu_start, ois_busy, dsu_busy, ois_exh;
  logic [KW:0]        k_target, n_central, n_picked, spt_count;
  mcode_t             seed_mcode;
  logic [LEVEL_W-1:0] ve_level;
  logic [$clog2(KNN):0] knn_k;
  logic               mm_tbl_we;
  node_idx_t          mm_tbl_idx;
  node_t              mm_tbl_data;

  mmio_regs #(.K(K), .KNN(KNN)) u_mmio (
    .clk, .rst_n, .mmio_we, .mmio_re, .mmio_addr, .mmio_wdata, .mmio_rdata, .mmio_rvalid,
    .ois_start, .dsu_start, .k_target, .seed_mcode, .n_central, .ve_level, .knn_k,
    .tbl_we(mm_tbl_we), .tbl_idx(mm_tbl_idx), .tbl_data(mm_tbl_data),
    .ois_busy, .ois_done, .ois_exhausted(ois_exh), .spt_count, .dsu_busy, .dsu_done
  );

  // ---- Octree-Table and its port sharing ----
  logic               t_rd_en, t_wr_en;
  node_idx_t          t_rd_base, t_wr_idx;
  node_t              t_wr_data;
  node_t [FANOUT-1:0] t_rd_data;

  logic               o_rd_en, o_wr_en, d_rd_en;
  node_idx_t          o_rd_base, o_wr_idx, d_rd_base;
  node_t              o_wr_data;

  octree_table #(.NODES(NODES)) u_table (
    .clk, .rd_en(t_rd_en), .rd_base(t_rd_base), .rd_data(t_rd_data),
    .wr_en(t_wr_en), .wr_idx(t_wr_idx), .wr_data(t_wr_data)
  );

  always_comb begin
    t_rd_en   = ois_busy ? o_rd_en   : d_rd_en;
    t_rd_base = ois_busy ? o_rd_base : d_rd_base;
    t_wr_en   = ois_busy ? o_wr_en   : mm_tbl_we;
    t_wr_idx  = ois_busy ? o_wr_idx  : mm_tbl_idx;
    t_wr_data = ois_busy ? o_wr_data : mm_tbl_data;
  end

  // ---- Pre-processing engine, FPGA part: down-sampling unit + SPT ----
  logic           spt_clear, spt_we, spt_re;
  logic [KW-1:0]  spt_widx, spt_ridx;
  paddr_t         spt_wdata, spt_rdata;

  downsampling_unit #(.K(K)) u_ois (
    .clk, .rst_n, .start(ois_start), .k_target, .seed_mcode,
    .busy(ois_busy), .done(ois_done), .exhausted(ois_exh), .n_picked,
    .tbl_rd_en(o_rd_en), .tbl_rd_base(o_rd_base), .tbl_rd_data(t_rd_data),
    .tbl_wr_en(o_wr_en), .tbl_wr_idx(o_wr_idx), .tbl_wr_data(o_wr_data),
    .spt_clear, .spt_we, .spt_widx, .spt_wdata
  );

  sampled_points_table #(.K(K)) u_spt (
    .clk, .rst_n, .clear(spt_clear), .we(spt_we), .widx(spt_widx), .wdata(spt_wdata),
    .re(spt_re), .ridx(spt_ridx), .rdata(spt_rdata), .count(spt_count)
  );

  // ---- Inference engine: data structuring unit + input buffer ----
  logic                   ob_free, ob_we, ob_commit, ob_short;
  logic [$clog2(KNN)-1:0] ob_widx;
  logic [$clog2(KNN):0]   ob_count;
  point_t                 ob_wdata, ob_central;
  logic [2:0]             ob_rings;

  data_structuring_unit #(.K(K), .KNN(KNN), .SORT_N(SORT_N), .R_MAX(R_MAX), .VL_MAX(VL_MAX)) u_dsu (
    .clk, .rst_n, .start(dsu_start && !ois_busy), .n_central, .ve_level, .knn_k,
    .busy(dsu_busy), .done(dsu_done),
    .spt_re, .spt_ridx, .spt_rdata,
    .tbl_rd_en(d_rd_en), .tbl_rd_base(d_rd_base), .tbl_rd_data(t_rd_data),
    .mem_req, .mem_addr, .mem_gnt, .mem_rvalid, .mem_rdata,
    .ob_free, .ob_we, .ob_widx, .ob_wdata, .ob_commit, .ob_count, .ob_central,
    .ob_rings, .ob_short
  );

  input_buffer #(.KNN(KNN)) u_ibuf (
    .clk, .rst_n, .we(ob_we), .widx(ob_widx), .wdata(ob_wdata),
    .commit(ob_commit), .commit_count(ob_count), .commit_central(ob_central), .free(ob_free),
    .subset_valid, .subset_count, .subset_central,
    .rd_idx(dla_rd_idx), .rd_data(dla_rd_data), .release_buf(dla_release)
  );

  // n_picked and the ring/short flags are visible through spt_count and the
  // subset itself; the down-sampling unit's own copy is not needed here.
  logic unused_ok;
  assign unused_ok = ^{n_picked, ob_rings, ob_short};

  a_one_table_owner: assert property (@(posedge clk) disable iff (!rst_n)
    !(ois_busy && dsu_busy));
endmodule
