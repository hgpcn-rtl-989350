// octree_lookup -- Octree neighbour-search engine of the data structuring
// unit.
//
// Finds the node of a given voxel: starting at the root it reads the
// children of the current node as one group (the Octree-Table returns all
// eight in one cycle), keeps the child whose m-code agrees with the target
// m-code on the top 3*lvl bits, and descends until it reaches `level`.
// It reports `found` with the node's static record (first host address and
// point count of the voxel), or not found as soon as a level has no
// matching child, i.e. the voxel holds no points.
//
// The paper uses a standard Octree neighbour search to find the voxels next
// to a central voxel; this top-down walk is the simplest form of it and is
// this design's choice.
//
// Timing: start -> done pulse after 2 + level cycles when found, fewer when
// the walk stops early.  target_mcode is left-aligned; bits below level are
// ignored.  One table read per cycle.
module octree_lookup
  import hgpcn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  mcode_t             target_mcode,
  input  logic [LEVEL_W-1:0] level,
  output logic               busy,
  output logic               done,
  output logic               found,
  output node_static_t       node,
  // Octree-Table
  output logic               tbl_rd_en,
  output node_idx_t          tbl_rd_base,
  input  node_t [FANOUT-1:0] tbl_rd_data
);
  typedef enum logic [1:0] {L_IDLE, L_ROOT, L_ROOT_W, L_WALK} lstate_t;
  lstate_t state;

  mcode_t             tgt_q;
  logic [LEVEL_W-1:0] lvl_q, level_q;
  logic [3:0]         num_q;

  // matching child among the group that was read
  logic       hit;
  logic [2:0] hit_j;
  always_comb begin
    hit   = 1'b0;
    hit_j = '0;
    for (int j = 0; j < FANOUT; j++)
      if (4'(j) < num_q &&
          ((tbl_rd_data[j].s.mcode ^ tgt_q) & level_mask(lvl_q)) == '0) begin
        hit   = 1'b1;
        hit_j = 3'(j);
      end
  end

  always_comb begin
    tbl_rd_en   = 1'b0;
    tbl_rd_base = '0;
    unique case (state)
      L_ROOT:   tbl_rd_en = 1'b1;
      L_ROOT_W: begin tbl_rd_en = 1'b1; tbl_rd_base = tbl_rd_data[0].s.child_base; end
      L_WALK:   if (hit && lvl_q != level_q && !tbl_rd_data[hit_j].s.is_leaf) begin
        tbl_rd_en   = 1'b1;
        tbl_rd_base = tbl_rd_data[hit_j].s.child_base;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      state   <= L_IDLE;
      busy    <= 1'b0;
      found   <= 1'b0;
      node    <= '0;
      tgt_q   <= '0;
      lvl_q   <= '0;
      level_q <= '0;
      num_q   <= '0;
    end else begin
      unique case (state)
        L_IDLE: if (start) begin
          busy    <= 1'b1;
          tgt_q   <= target_mcode;
          level_q <= level;
          state   <= L_ROOT;
        end
        L_ROOT: state <= L_ROOT_W;
        L_ROOT_W: begin
          lvl_q <= LEVEL_W'(1);
          num_q <= tbl_rd_data[0].s.child_num;
          state <= L_WALK;
        end
        L_WALK: begin
          if (!hit || lvl_q == level_q || tbl_rd_data[hit_j].s.is_leaf) begin
            found <= hit && lvl_q == level_q;
            node  <= tbl_rd_data[hit_j].s;
            busy  <= 1'b0;
            done  <= 1'b1;
            state <= L_IDLE;
          end else begin
            lvl_q <= lvl_q + 1'b1;
            num_q <= tbl_rd_data[hit_j].s.child_num;
          end
        end
        default: state <= L_IDLE;
      endcase
    end
  end
endmodule
