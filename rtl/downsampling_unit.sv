// downsampling_unit -- Octree-Indexed Sampling (OIS) engine.
//
// Performs farthest-point sampling on the Octree-Table instead of on the
// points themselves.  Each round walks from the root to a leaf: at every
// level the eight Sampling Modules score the children of the current node
// by the Hamming distance of their m-codes to the seed m-code, an 8-input
// bitonic sorter picks the farthest child that still holds unpicked
// points, and the walk descends into it.  At the leaf one of its points is
// taken, its host address is appended to the Sampled-Points-Table (SPT) and
// the seed is replaced by the summary point of all voxels picked so far
// (seed_update).  Rounds repeat until k_target points are picked or the
// octree runs out of points.  No point data is read: the SPT holds host
// addresses only.
//
// Round 0 picks the seed point itself: the walk then follows the children
// whose m-codes match the seed m-code (smallest Hamming distance) instead
// of the farthest ones, and takes the first point of the leaf it reaches.
//
// Details that are this design's own:
//  * a node takes part only while its pts_left is non-zero; every node on
//    the walk has pts_left decremented, so no point is picked twice;
//  * in a leaf, the point farthest from the seed along the space-filling
//    curve is the last unpicked one when the leaf comes after the seed
//    m-code in curve order, else the first one (lo_off counts the latter);
//  * ties between equally distant children go to the higher child index.
//
// Timing: one cycle to read the root, then one cycle per octree level
// (group read of eight children and selection in the same cycle), then the
// seed divider; a round takes 3 + DEPTH + SEED_CYCLES cycles for a tree
// whose leaves all sit at level DEPTH.  Assumes the root is not a leaf.
//
// Interface: start (with k_target and seed_mcode valid) -> busy ... done
// pulse, n_picked = points written to the SPT, exhausted = octree ran dry.
module downsampling_unit
  import hgpcn_pkg::*;
#(
  parameter int K = 4096                  // SPT depth, most points per frame
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(K):0]       k_target,
  input  mcode_t                   seed_mcode,
  output logic                     busy,
  output logic                     done,
  output logic                     exhausted,
  output logic [$clog2(K):0]       n_picked,
  // Octree-Table
  output logic                     tbl_rd_en,
  output node_idx_t                tbl_rd_base,
  input  node_t [FANOUT-1:0]       tbl_rd_data,
  output logic                     tbl_wr_en,
  output node_idx_t                tbl_wr_idx,
  output node_t                    tbl_wr_data,
  // Sampled-Points-Table
  output logic                     spt_clear,
  output logic                     spt_we,
  output logic [$clog2(K)-1:0]     spt_widx,
  output paddr_t                   spt_wdata
);
  localparam int KW    = $clog2(K);
  localparam int KEY_W = 1 + DIST_W + 3;

  typedef enum logic [2:0] {S_IDLE, S_ROOT, S_ROOT_W, S_WALK, S_SEED} state_t;
  state_t state;

  mcode_t             seed_q;
  logic [LEVEL_W-1:0] level_q;
  logic [3:0]         child_num_q;
  node_idx_t          base_q;
  logic [KW:0]        iter_q, target_q;
  logic               match_mode;

  // ---- eight Sampling Modules + bitonic selection ----
  logic [FANOUT-1:0][DIST_W-1:0] hd;
  logic [FANOUT-1:0][KEY_W-1:0]  key_in, key_out;
  logic [FANOUT-1:0][2:0]        pay_in, pay_out;

  for (genvar j = 0; j < FANOUT; j++) begin : g_sm
    sampling_module u_sm (
      .assigned_mcode(tbl_rd_data[j].s.mcode),
      .seed_mcode    (seed_q),
      .level         (level_q),
      .hdist         (hd[j])
    );
    logic          live;
    logic [DIST_W-1:0] score;
    assign live   = (4'(j) < child_num_q) && (tbl_rd_data[j].d.pts_left != '0);
    assign score  = match_mode ? DIST_W'(MCODE_W) - hd[j] : hd[j];
    assign key_in[j] = {live, score, 3'(j)};
    assign pay_in[j] = 3'(j);
  end

  bitonic_sorter #(.N(FANOUT), .KEY_W(KEY_W), .PAY_W(3)) u_sel (
    .key_in(key_in), .pay_in(pay_in), .key_out(key_out), .pay_out(pay_out)
  );

  assign match_mode = (iter_q == '0);

  // chosen child and its updated entry
  logic [2:0] sel;
  node_t      ch, ch_upd;
  logic       take_hi;
  paddr_t     pick_addr;
  always_comb begin
    sel       = pay_out[0];
    ch        = tbl_rd_data[sel];
    ch_upd    = ch;
    ch_upd.d.pts_left = ch.d.pts_left - 1'b1;
    take_hi   = !match_mode && (ch.s.mcode >= seed_q);
    pick_addr = ch.s.pt_addr + paddr_t'(ch.d.lo_off);
    if (take_hi) pick_addr = pick_addr + paddr_t'(ch.d.pts_left) - 1'b1;
    else         ch_upd.d.lo_off = ch.d.lo_off + 1'b1;
  end

  // ---- seed summary ----
  logic   su_add, su_busy, su_valid;
  mcode_t su_seed;
  seed_update #(.KMAX(K)) u_seed (
    .clk, .rst_n, .clear(start && state == S_IDLE), .add(su_add),
    .add_mcode(ch.s.mcode), .busy(su_busy), .seed_valid(su_valid), .seed_mcode(su_seed)
  );

  // ---- control ----
  always_comb begin
    tbl_rd_en   = 1'b0;
    tbl_rd_base = '0;
    tbl_wr_en   = 1'b0;
    tbl_wr_idx  = '0;
    tbl_wr_data = ch_upd;
    spt_we      = 1'b0;
    spt_widx    = KW'(iter_q);
    spt_wdata   = pick_addr;
    su_add      = 1'b0;
    spt_clear   = (state == S_IDLE) && start;
    unique case (state)
      S_ROOT: tbl_rd_en = 1'b1;                       // root sits at index 0
      S_ROOT_W: if (tbl_rd_data[0].d.pts_left != '0) begin
        tbl_wr_en   = 1'b1;
        tbl_wr_data = tbl_rd_data[0];
        tbl_wr_data.d.pts_left = tbl_rd_data[0].d.pts_left - 1'b1;
        tbl_rd_en   = 1'b1;
        tbl_rd_base = tbl_rd_data[0].s.child_base;
      end
      S_WALK: if (key_out[0][KEY_W-1]) begin
        tbl_wr_en  = 1'b1;
        tbl_wr_idx = base_q + node_idx_t'(sel);
        if (ch.s.is_leaf) begin
          spt_we = 1'b1;
          su_add = 1'b1;
        end else begin
          tbl_rd_en   = 1'b1;
          tbl_rd_base = ch.s.child_base;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      state       <= S_IDLE;
      busy        <= 1'b0;
      exhausted   <= 1'b0;
      n_picked    <= '0;
      iter_q      <= '0;
      target_q    <= '0;
      seed_q      <= '0;
      level_q     <= '0;
      child_num_q <= '0;
      base_q      <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          busy      <= 1'b1;
          exhausted <= 1'b0;
          iter_q    <= '0;
          n_picked  <= '0;
          target_q  <= (k_target > (KW+1)'(K)) ? (KW+1)'(K) : k_target;
          seed_q    <= seed_mcode;
          state     <= (k_target == '0) ? S_IDLE : S_ROOT;
          if (k_target == '0) begin busy <= 1'b0; done <= 1'b1; end
        end
        S_ROOT:   state <= S_ROOT_W;
        S_ROOT_W: begin
          if (tbl_rd_data[0].d.pts_left == '0) begin
            exhausted <= 1'b1;
            busy      <= 1'b0;
            done      <= 1'b1;
            state     <= S_IDLE;
          end else begin
            level_q     <= LEVEL_W'(1);
            child_num_q <= tbl_rd_data[0].s.child_num;
            base_q      <= tbl_rd_data[0].s.child_base;
            state       <= S_WALK;
          end
        end
        S_WALK: begin
          if (!key_out[0][KEY_W-1]) begin              // inconsistent table
            exhausted <= 1'b1;
            busy      <= 1'b0;
            done      <= 1'b1;
            state     <= S_IDLE;
          end else if (ch.s.is_leaf) begin
            n_picked <= iter_q + 1'b1;
            state    <= S_SEED;
          end else begin
            level_q     <= level_q + 1'b1;
            child_num_q <= ch.s.child_num;
            base_q      <= ch.s.child_base;
          end
        end
        S_SEED: if (su_valid) begin
          seed_q <= su_seed;
          iter_q <= iter_q + 1'b1;
          if (iter_q + 1'b1 == target_q) begin
            busy  <= 1'b0;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_ROOT;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a leaf that is reached must still hold the point being taken
  a_leaf_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_WALK && key_out[0][KEY_W-1] && ch.s.is_leaf) |-> ch.d.pts_left != '0);
endmodule
