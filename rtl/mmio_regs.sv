// mmio_regs -- host (CPU) access to the accelerator over 64-bit MMIO.
//
// The host builds the octree and transfers the Octree-Table through MMIO,
// sets the frame parameters and starts the two engines.  Word addresses
// (mmio_addr counts 64-bit words):
//
//   0  CTRL       W  bit0: start down-sampling, bit1: start data structuring
//   1  STATUS     R  bit0 OIS busy, bit1 OIS done (sticky), bit2 OIS ran out
//                    of points, bit3 DSU busy, bit4 DSU done (sticky),
//                    [47:32] points in the Sampled-Points-Table
//   2  K_TARGET   RW points to sample
//   3  SEED       RW seed m-code (left-aligned)
//   4  N_CENTRAL  RW central points for data structuring
//   5  VE_LEVEL   RW octree level of voxel expansion
//   6  KNN_K      RW neighbours per central point
//   7  TBL_LO     W  {pt_addr[23:0], pt_cnt[23:0], child_base[15:0]}
//   8  TBL_HI     W  {mcode[29:0], is_leaf, child_num[3:0]} in bits [34:0]
//   9  TBL_IDX    W  node index; writing it stores {TBL_HI, TBL_LO} there,
//                    with pts_left = pt_cnt and lo_off = 0
//
// Writing CTRL clears the matching sticky done bit.  Reads return data one
// cycle later with mmio_rvalid.  The paper says only that the table goes to
// the FPGA over MMIO; the register map is this design's own.
//
// Some output bits are constant by construction: the dynamic lo_off field of
// every table entry written is zero, and no register returns data in the
// top bits of mmio_rdata.
module mmio_regs
  import hgpcn_pkg::*;
#(
  parameter int K   = 4096,
  parameter int KNN = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 mmio_we,
  input  logic                 mmio_re,
  input  logic [3:0]           mmio_addr,
  input  logic [63:0]          mmio_wdata,
  output logic [63:0]          mmio_rdata,
  output logic                 mmio_rvalid,
  // to the engines
  output logic                 ois_start,
  output logic                 dsu_start,
  output logic [$clog2(K):0]   k_target,
  output mcode_t               seed_mcode,
  output logic [$clog2(K):0]   n_central,
  output logic [LEVEL_W-1:0]   ve_level,
  output logic [$clog2(KNN):0] knn_k,
  output logic                 tbl_we,
  output node_idx_t            tbl_idx,
  output node_t                tbl_data,
  // status
  input  logic                 ois_busy,
  input  logic                 ois_done,
  input  logic                 ois_exhausted,
  input  logic [$clog2(K):0]   spt_count,
  input  logic                 dsu_busy,
  input  logic                 dsu_done
);
  typedef enum logic [3:0] {
    A_CTRL, A_STATUS, A_K_TARGET, A_SEED, A_N_CENTRAL, A_VE_LEVEL, A_KNN_K,
    A_TBL_LO, A_TBL_HI, A_TBL_IDX
  } reg_addr_t;

  logic [63:0] tbl_lo;
  logic [34:0] tbl_hi;
  logic        ois_done_s, dsu_done_s;

  always_ff @(posedge clk) begin
    ois_start <= 1'b0;
    dsu_start <= 1'b0;
    tbl_we    <= 1'b0;
    if (!rst_n) begin
      k_target   <= (($clog2(K))+1)'(K);
      seed_mcode <= '0;
      n_central  <= '0;
      ve_level   <= LEVEL_W'(1);
      knn_k      <= (($clog2(KNN))+1)'(KNN);
      tbl_lo     <= '0;
      tbl_hi     <= '0;
      tbl_idx    <= '0;
      tbl_data   <= '0;
      ois_done_s <= 1'b0;
      dsu_done_s <= 1'b0;
    end else begin
      if (ois_done) ois_done_s <= 1'b1;
      if (dsu_done) dsu_done_s <= 1'b1;
      if (mmio_we) begin
        unique case (reg_addr_t'(mmio_addr))
          A_CTRL: begin
            ois_start <= mmio_wdata[0];
            dsu_start <= mmio_wdata[1];
            if (mmio_wdata[0]) ois_done_s <= 1'b0;
            if (mmio_wdata[1]) dsu_done_s <= 1'b0;
          end
          A_K_TARGET:  k_target   <= mmio_wdata[$clog2(K):0];
          A_SEED:      seed_mcode <= mmio_wdata[MCODE_W-1:0];
          A_N_CENTRAL: n_central  <= mmio_wdata[$clog2(K):0];
          A_VE_LEVEL:  ve_level   <= mmio_wdata[LEVEL_W-1:0];
          A_KNN_K:     knn_k      <= mmio_wdata[$clog2(KNN):0];
          A_TBL_LO:    tbl_lo     <= mmio_wdata;
          A_TBL_HI:    tbl_hi     <= mmio_wdata[34:0];
          A_TBL_IDX: begin
            tbl_we              <= 1'b1;
            tbl_idx             <= mmio_wdata[NODE_W-1:0];
            tbl_data.s.mcode      <= tbl_hi[34:5];
            tbl_data.s.is_leaf    <= tbl_hi[4];
            tbl_data.s.child_num  <= tbl_hi[3:0];
            tbl_data.s.pt_addr    <= tbl_lo[63:40];
            tbl_data.s.pt_cnt     <= tbl_lo[39:16];
            tbl_data.s.child_base <= tbl_lo[15:0];
            tbl_data.d.pts_left   <= tbl_lo[39:16];
            tbl_data.d.lo_off     <= '0;
          end
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mmio_rvalid <= 1'b0;
      mmio_rdata  <= '0;
    end else begin
      mmio_rvalid <= mmio_re;
      if (mmio_re) begin
        unique case (reg_addr_t'(mmio_addr))
          A_STATUS:    mmio_rdata <= {16'd0, 16'(spt_count), 27'd0,
                                      dsu_done_s, dsu_busy, ois_exhausted, ois_done_s, ois_busy};
          A_K_TARGET:  mmio_rdata <= 64'(k_target);
          A_SEED:      mmio_rdata <= 64'(seed_mcode);
          A_N_CENTRAL: mmio_rdata <= 64'(n_central);
          A_VE_LEVEL:  mmio_rdata <= 64'(ve_level);
          A_KNN_K:     mmio_rdata <= 64'(knn_k);
          default:     mmio_rdata <= '0;
        endcase
      end
    end
  end
endmodule
