// data_structuring_unit -- Voxel-Expanded Gathering (VEG) k-nearest-
// neighbour search.
//
// For each central point it forms the point-subset fed to the feature
// computation unit: the knn_k points nearest to the central point.  Rather
// than ranking every point of the cloud, it grows a cube of voxels around
// the central point's voxel, ring by ring, until the rings hold at least
// knn_k points.  Every point of the inner rings is certainly among the
// nearest and is copied without any distance computation; only the points
// of the last ring are ranked by distance, and just enough of the nearest
// are kept to reach knn_k.  The work per central point follows the six
// stages the paper names:
//
//   FP  fetch the central point: its host address from the Sampled-Points-
//       Table, then the point record from host memory;
//   LV  locate the voxel at octree level ve_level that contains it;
//   VE  expand ring by ring (ring r = voxels at Chebyshev distance r in
//       voxel units), looking each voxel up in the Octree-Table and keeping
//       the non-empty ones in a voxel list, until the rings hold >= knn_k
//       points or ring R_MAX is done;
//   GP  copy every point of rings 0..n-1 to the input buffer;
//   ST  compute squared Euclidean distances of the ring-n points, keep the
//       nearest with a SORT_N-input bitonic sorter (chunks of SORT_N/2 new
//       candidates are merged with the best SORT_N/2 so far);
//   BF  write the knn_k - (points of rings 0..n-1) nearest of them to the
//       input buffer and commit the subset.
//
// If even R_MAX rings do not hold knn_k points, the subset is committed
// short, with every point found.  Before GP the unit waits until the input
// buffer is free (a stall while the accelerator still reads the previous
// subset).  The stages run one after another for one central point at a
// time; the paper's parallel neighbour searches are not built: a single
// lookup engine serves VE.
//
// Choices of this design: central points are the first n_central entries of
// the Sampled-Points-Table; the expansion level is set by the host; ring
// enumeration walks the whole (2r+1)^3 cube and skips inner positions at one
// cycle each; one host read is outstanding at a time.
//
// Interfaces: start/busy/done; SPT read port (data one cycle after spt_re);
// Octree-Table group read port; host memory read (mem_req/mem_addr held
// until mem_gnt, then one mem_rvalid with the point record); input buffer
// write port with commit.  ob_commit also reports the number of rings
// expanded (ob_rings) and whether the subset is short.
module data_structuring_unit
  import hgpcn_pkg::*;
#(
  parameter int K      = 4096,   // Sampled-Points-Table depth
  parameter int KNN    = 32,     // largest neighbourhood size
  parameter int SORT_N = 64,     // bitonic sorter width
  parameter int R_MAX  = 4,      // most expansion rings
  parameter int VL_MAX = 1024    // voxel-list entries
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [$clog2(K):0]     n_central,
  input  logic [LEVEL_W-1:0]     ve_level,
  input  logic [$clog2(KNN):0]   knn_k,
  output logic                   busy,
  output logic                   done,
  // Sampled-Points-Table read
  output logic                   spt_re,
  output logic [$clog2(K)-1:0]   spt_ridx,
  input  paddr_t                 spt_rdata,
  // Octree-Table read
  output logic                   tbl_rd_en,
  output node_idx_t              tbl_rd_base,
  input  node_t [FANOUT-1:0]     tbl_rd_data,
  // host memory read
  output logic                   mem_req,
  output paddr_t                 mem_addr,
  input  logic                   mem_gnt,
  input  logic                   mem_rvalid,
  input  point_t                 mem_rdata,
  // input buffer
  input  logic                   ob_free,
  output logic                   ob_we,
  output logic [$clog2(KNN)-1:0] ob_widx,
  output point_t                 ob_wdata,
  output logic                   ob_commit,
  output logic [$clog2(KNN):0]   ob_count,
  output point_t                 ob_central,
  output logic [2:0]             ob_rings,
  output logic                   ob_short
);
  localparam int KW    = $clog2(K);
  localparam int NW    = $clog2(KNN);
  localparam int HALF  = SORT_N / 2;
  localparam int HW    = $clog2(HALF);
  localparam int VW    = $clog2(VL_MAX);
  localparam int KEY_W = 1 + SQD_W;
  localparam int SC_W  = DEPTH + 2;          // signed voxel coordinate

  initial assert (KNN <= HALF && R_MAX <= 7 && (2*R_MAX+1)**3 <= VL_MAX)
    else $error("data_structuring_unit: parameter combination not supported");

  typedef enum logic [4:0] {
    S_IDLE, S_FP_SPT, S_FP_SPTW, S_FP_REQ, S_FP_RSP, S_LV, S_LV_W,
    S_VE, S_VE_W, S_VE_NEXT, S_BUF_WAIT, S_GP_ENT, S_GP_REQ, S_GP_RSP,
    S_ST_ENT, S_ST_REQ, S_ST_RSP, S_SORT, S_BF, S_COMMIT
  } state_t;
  state_t state;

  typedef struct packed {
    logic [2:0] ring;
    paddr_t     addr;
    cnt_t       cnt;
  } vox_t;

  // ---------------- registers ----------------
  logic [KW:0]        c_q;                 // central point number
  logic [KW:0]        nc_q;
  logic [LEVEL_W-1:0] lvl_q;
  logic [NW:0]        kk_q;
  paddr_t             cen_addr_q;
  point_t             cen_q;
  logic signed [SC_W-1:0] vcx, vcy, vcz;   // central voxel coordinate
  logic [2:0]         r_q, n_q;
  logic signed [4:0]  dx, dy, dz;
  cnt_t               total_q;             // points in rings 0..r
  logic               resume_q;            // chunk filled inside a voxel
  vox_t               vl [VL_MAX];
  logic [VW:0]        vl_n, vi;
  paddr_t             pa_q;
  cnt_t               pleft_q;
  logic [NW:0]        ob_n;                // points written to the buffer
  logic [HW:0]        m_q;                 // new candidates in the chunk
  logic [HW:0]        b_q;                 // buffering index
  logic [HALF-1:0][KEY_W-1:0] best_k, cand_k;
  logic [HALF-1:0][$bits(point_t)-1:0] best_p, cand_p;

  // ---------------- neighbour lookup engine ----------------
  logic               lk_start, lk_busy, lk_done, lk_found;
  mcode_t             lk_target;
  node_static_t       lk_node;
  octree_lookup u_lookup (
    .clk, .rst_n, .start(lk_start), .target_mcode(lk_target), .level(lvl_q),
    .busy(lk_busy), .done(lk_done), .found(lk_found), .node(lk_node),
    .tbl_rd_en, .tbl_rd_base, .tbl_rd_data
  );

  // neighbour voxel under the ring enumerator
  logic signed [SC_W-1:0] nx, ny, nz;
  logic                   on_ring, in_range;
  logic [4:0]             ax, ay, az;
  logic [SC_W-1:0]        lim;
  always_comb begin
    nx  = vcx + SC_W'(dx);
    ny  = vcy + SC_W'(dy);
    nz  = vcz + SC_W'(dz);
    ax  = dx[4] ? 5'(-dx) : 5'(dx);
    ay  = dy[4] ? 5'(-dy) : 5'(dy);
    az  = dz[4] ? 5'(-dz) : 5'(dz);
    on_ring  = (ax == 5'(r_q)) || (ay == 5'(r_q)) || (az == 5'(r_q));
    lim      = SC_W'(1) << lvl_q;
    in_range = !nx[SC_W-1] && !ny[SC_W-1] && !nz[SC_W-1] &&
               nx < $signed(lim) && ny < $signed(lim) && nz < $signed(lim);
  end

  function automatic mcode_t voxel_mcode(logic [SC_W-1:0] x, logic [SC_W-1:0] y,
                                         logic [SC_W-1:0] z, logic [LEVEL_W-1:0] l);
    int sh;
    sh = DEPTH - int'(l);
    return morton_encode(vcoord_t'(x << sh), vcoord_t'(y << sh), vcoord_t'(z << sh));
  endfunction

  // ---------------- distance and sorter ----------------
  logic [SQD_W-1:0] d2;
  always_comb begin
    logic signed [COORD_W:0] ex, ey, ez;
    ex = $signed({1'b0, mem_rdata.x}) - $signed({1'b0, cen_q.x});
    ey = $signed({1'b0, mem_rdata.y}) - $signed({1'b0, cen_q.y});
    ez = $signed({1'b0, mem_rdata.z}) - $signed({1'b0, cen_q.z});
    d2 = SQD_W'(ex * ex) + SQD_W'(ey * ey) + SQD_W'(ez * ez);
  end

  logic [SORT_N-1:0][KEY_W-1:0]            s_key_out;
  logic [SORT_N-1:0][$bits(point_t)-1:0]   s_pay_out;
  bitonic_sorter #(.N(SORT_N), .KEY_W(KEY_W), .PAY_W($bits(point_t))) u_sort (
    .key_in({cand_k, best_k}), .pay_in({cand_p, best_p}),
    .key_out(s_key_out), .pay_out(s_pay_out)
  );

  vox_t ve;
  assign ve = vl[VW'(vi)];

  // ---------------- outputs ----------------
  always_comb begin
    spt_re    = (state == S_FP_SPT);
    spt_ridx  = KW'(c_q);
    mem_req   = (state == S_FP_REQ) || (state == S_GP_REQ) || (state == S_ST_REQ);
    mem_addr  = (state == S_FP_REQ) ? cen_addr_q : pa_q;
    lk_start  = 1'b0;
    lk_target = voxel_mcode(nx, ny, nz, lvl_q);
    if (state == S_LV) begin
      lk_start  = 1'b1;
      lk_target = voxel_mcode(vcx, vcy, vcz, lvl_q);
    end else if (state == S_VE && on_ring && in_range) begin
      lk_start  = 1'b1;
    end
    ob_we    = 1'b0;
    ob_widx  = NW'(ob_n);
    ob_wdata = mem_rdata;
    if (state == S_GP_RSP && mem_rvalid) ob_we = 1'b1;
    if (state == S_BF && b_q < (HW+1)'(HALF) && best_k[HW'(b_q)][KEY_W-1] &&
        ob_n < kk_q) begin
      ob_we    = 1'b1;
      ob_wdata = best_p[HW'(b_q)];
    end
    ob_commit  = (state == S_COMMIT);
    ob_count   = ob_n;
    ob_central = cen_q;
    ob_rings   = n_q;
    ob_short   = ob_n < kk_q;
  end

  // ---------------- control ----------------
  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      state    <= S_IDLE;
      busy     <= 1'b0;
      c_q      <= '0;
      nc_q     <= '0;
      lvl_q    <= LEVEL_W'(1);
      kk_q     <= '0;
      cen_addr_q <= '0;
      cen_q    <= '0;
      {vcx, vcy, vcz} <= '0;
      r_q      <= '0;
      n_q      <= '0;
      {dx, dy, dz} <= '0;
      total_q  <= '0;
      resume_q <= 1'b0;
      vl_n     <= '0;
      vi       <= '0;
      pa_q     <= '0;
      pleft_q  <= '0;
      ob_n     <= '0;
      m_q      <= '0;
      b_q      <= '0;
      best_k   <= '0;
      cand_k   <= '0;
      best_p   <= '0;
      cand_p   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          c_q   <= '0;
          nc_q  <= (n_central > (KW+1)'(K)) ? (KW+1)'(K) : n_central;
          lvl_q <= (ve_level == '0) ? LEVEL_W'(1) :
                   (ve_level > LEVEL_W'(DEPTH)) ? LEVEL_W'(DEPTH) : ve_level;
          kk_q  <= (knn_k > (NW+1)'(KNN)) ? (NW+1)'(KNN) : knn_k;
          busy  <= (n_central != '0);
          done  <= (n_central == '0);
          state <= (n_central == '0) ? S_IDLE : S_FP_SPT;
        end
        // ---- FP ----
        S_FP_SPT:  state <= S_FP_SPTW;
        S_FP_SPTW: begin cen_addr_q <= spt_rdata; state <= S_FP_REQ; end
        S_FP_REQ:  if (mem_gnt) state <= S_FP_RSP;
        S_FP_RSP:  if (mem_rvalid) begin
          cen_q <= mem_rdata;
          vcx   <= SC_W'(leaf_coord(mem_rdata.x) >> (DEPTH - int'(lvl_q)));
          vcy   <= SC_W'(leaf_coord(mem_rdata.y) >> (DEPTH - int'(lvl_q)));
          vcz   <= SC_W'(leaf_coord(mem_rdata.z) >> (DEPTH - int'(lvl_q)));
          state <= S_LV;
        end
        // ---- LV ----
        S_LV: begin
          vl_n    <= '0;
          total_q <= '0;
          state   <= S_LV_W;
        end
        S_LV_W: if (lk_done) begin
          cnt_t n0;
          n0 = lk_found ? lk_node.pt_cnt : '0;
          if (lk_found) begin
            vl[0] <= '{ring: 3'd0, addr: lk_node.pt_addr, cnt: n0};
            vl_n  <= (VW+1)'(1);
          end
          total_q <= n0;
          if (n0 >= cnt_t'(kk_q) || R_MAX == 0) begin
            n_q      <= '0;
            state    <= S_BUF_WAIT;
          end else begin
            r_q      <= 3'd1;
            dx <= -5'sd1; dy <= -5'sd1; dz <= -5'sd1;
            state    <= S_VE;
          end
        end
        // ---- VE ----
        S_VE:   state <= (on_ring && in_range) ? S_VE_W : S_VE_NEXT;
        S_VE_W: if (lk_done) begin
          if (lk_found && lk_node.pt_cnt != '0 && vl_n < (VW+1)'(VL_MAX)) begin
            vl[VW'(vl_n)] <= '{ring: r_q, addr: lk_node.pt_addr, cnt: lk_node.pt_cnt};
            vl_n    <= vl_n + 1'b1;
            total_q <= total_q + lk_node.pt_cnt;
          end
          state <= S_VE_NEXT;
        end
        S_VE_NEXT: begin
          state <= S_VE;
          if (dz != 5'(r_q)) dz <= dz + 1'b1;
          else begin
            dz <= -5'(r_q);
            if (dy != 5'(r_q)) dy <= dy + 1'b1;
            else begin
              dy <= -5'(r_q);
              if (dx != 5'(r_q)) dx <= dx + 1'b1;
              else begin                                  // ring r complete
                if (total_q >= cnt_t'(kk_q) || r_q == 3'(R_MAX)) begin
                  n_q   <= r_q;
                  state <= S_BUF_WAIT;
                end else begin
                  r_q <= r_q + 1'b1;
                  dx  <= -5'(r_q) - 5'sd1;
                  dy  <= -5'(r_q) - 5'sd1;
                  dz  <= -5'(r_q) - 5'sd1;
                end
              end
            end
          end
        end
        // ---- wait for a free input buffer ----
        S_BUF_WAIT: if (ob_free) begin
          vi    <= '0;
          ob_n  <= '0;
          state <= S_GP_ENT;
        end
        // ---- GP: copy rings 0..n-1 ----
        S_GP_ENT: begin
          if (vi == vl_n) begin
            vi     <= '0;
            m_q    <= '0;
            best_k <= '0;
            cand_k <= '0;
            state  <= S_ST_ENT;
          end else if (ve.ring < n_q && ve.cnt != '0) begin
            pa_q    <= ve.addr;
            pleft_q <= ve.cnt;
            state   <= S_GP_REQ;
          end else vi <= vi + 1'b1;
        end
        S_GP_REQ: if (mem_gnt) state <= S_GP_RSP;
        S_GP_RSP: if (mem_rvalid) begin
          ob_n    <= ob_n + 1'b1;
          pa_q    <= pa_q + 1'b1;
          pleft_q <= pleft_q - 1'b1;
          if (pleft_q == cnt_t'(1)) begin
            vi    <= vi + 1'b1;
            state <= S_GP_ENT;
          end else state <= S_GP_REQ;
        end
        // ---- ST: rank ring-n points ----
        S_ST_ENT: begin
          if (vi == vl_n) begin
            b_q   <= '0;
            state <= (m_q != '0) ? S_SORT : S_BF;
          end else if (ve.ring == n_q && ve.cnt != '0) begin
            pa_q    <= ve.addr;
            pleft_q <= ve.cnt;
            state   <= S_ST_REQ;
          end else vi <= vi + 1'b1;
        end
        S_ST_REQ: if (mem_gnt) state <= S_ST_RSP;
        S_ST_RSP: if (mem_rvalid) begin
          // nearest first: the sorter puts the largest key first
          cand_k[HW'(m_q)] <= {1'b1, ~d2};
          cand_p[HW'(m_q)] <= mem_rdata;
          m_q     <= m_q + 1'b1;
          pa_q    <= pa_q + 1'b1;
          pleft_q <= pleft_q - 1'b1;
          if (pleft_q == cnt_t'(1)) vi <= vi + 1'b1;
          resume_q <= (pleft_q != cnt_t'(1));
          if (m_q == (HW+1)'(HALF - 1)) state <= S_SORT;
          else if (pleft_q == cnt_t'(1)) state <= S_ST_ENT;
          else state <= S_ST_REQ;
        end
        S_SORT: begin
          for (int i = 0; i < HALF; i++) begin
            best_k[i] <= s_key_out[i];
            best_p[i] <= s_pay_out[i];
          end
          cand_k <= '0;
          m_q    <= '0;
          // resume the voxel list where the chunk filled up
          state  <= resume_q ? S_ST_REQ : S_ST_ENT;
        end
        // ---- BF: nearest of ring n into the buffer ----
        S_BF: begin
          if (ob_we) begin
            ob_n <= ob_n + 1'b1;
            b_q  <= b_q + 1'b1;
          end else state <= S_COMMIT;
        end
        S_COMMIT: begin
          c_q <= c_q + 1'b1;
          if (c_q + 1'b1 == nc_q) begin
            busy  <= 1'b0;
            done  <= 1'b1;
            state <= S_IDLE;
          end else state <= S_FP_SPT;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_buffer_bound: assert property (@(posedge clk) disable iff (!rst_n)
    ob_we |-> ob_n < kk_q);
endmodule
