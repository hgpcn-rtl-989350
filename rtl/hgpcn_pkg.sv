// hgpcn_pkg -- shared widths, record types and Morton-code helpers of the
// HgPCN accelerator (Octree-indexed sampling + voxel-expanded gathering).
//
// An octree of depth DEPTH divides the bounding cube into 2^DEPTH voxels per
// axis.  Each subdivision appends three bits to a voxel's Morton code
// (m-code): first the X bit, then Y, then Z.  M-codes are stored
// left-aligned in MCODE_W bits, so the code of a level-l voxel occupies the
// top 3*l bits and the remaining bits are zero.
//
// Point records in host memory hold three COORD_W-bit unsigned coordinates
// and an opaque FEAT_W-bit feature word; the top DEPTH bits of a coordinate
// are its leaf-voxel coordinate.
//
// Octree-Table entries (node_t) carry a static part loaded by the host and a
// dynamic part that the down-sampling unit updates while it samples
// (points still unpicked in the subtree, and how many were taken from the
// low end of a leaf's point range).  Children of a node sit at consecutive
// table indices starting at child_base; the points of any subtree sit at
// consecutive host addresses starting at pt_addr (the host stores points in
// space-filling-curve order).
package hgpcn_pkg;

  // ---------------- sizes ----------------
  localparam int DEPTH     = 10;           // octree levels below the root
  localparam int MCODE_W   = 3 * DEPTH;    // left-aligned m-code width
  localparam int NODE_W    = 16;           // octree-table index width
  localparam int ADDR_W    = 24;           // host point address (point index)
  localparam int CNT_W     = 24;           // point counts
  localparam int COORD_W   = 16;           // coordinate width in host records
  localparam int FEAT_W    = 32;           // feature word width
  localparam int FANOUT    = 8;            // children per octree node
  localparam int DIST_W    = $clog2(MCODE_W + 1);  // Hamming distance width
  localparam int LEVEL_W   = $clog2(DEPTH + 1);
  localparam int SQD_W     = 2 * COORD_W + 2;      // squared Euclidean distance

  // ---------------- records ----------------
  typedef logic [MCODE_W-1:0] mcode_t;
  typedef logic [NODE_W-1:0]  node_idx_t;
  typedef logic [ADDR_W-1:0]  paddr_t;
  typedef logic [CNT_W-1:0]   cnt_t;
  typedef logic [DEPTH-1:0]   vcoord_t;    // leaf-voxel coordinate

  typedef struct packed {
    mcode_t     mcode;       // left-aligned m-code of the voxel
    logic       is_leaf;
    logic [3:0] child_num;   // 0..8
    node_idx_t  child_base;  // table index of the first child
    paddr_t     pt_addr;     // host address of the first point of the subtree
    cnt_t       pt_cnt;      // points in the subtree
  } node_static_t;

  typedef struct packed {
    cnt_t pts_left;          // unpicked points left in the subtree
    cnt_t lo_off;            // leaf only: points taken from the low end
  } node_dyn_t;

  typedef struct packed {
    node_static_t s;
    node_dyn_t    d;
  } node_t;

  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] z;
    logic [FEAT_W-1:0]  f;
  } point_t;

  // ---------------- Morton helpers ----------------
  // Interleave leaf-voxel coordinates: level 1 (MSBs) first, X then Y then Z.
  function automatic mcode_t morton_encode(vcoord_t vx, vcoord_t vy, vcoord_t vz);
    mcode_t m;
    for (int l = 0; l < DEPTH; l++) begin
      m[MCODE_W-1-3*l] = vx[DEPTH-1-l];
      m[MCODE_W-2-3*l] = vy[DEPTH-1-l];
      m[MCODE_W-3-3*l] = vz[DEPTH-1-l];
    end
    return m;
  endfunction

  function automatic vcoord_t morton_axis(mcode_t m, int axis);
    vcoord_t v;
    for (int l = 0; l < DEPTH; l++) v[DEPTH-1-l] = m[MCODE_W-1-3*l-axis];
    return v;
  endfunction

  // Mask keeping the top 3*level bits of an m-code.
  function automatic mcode_t level_mask(logic [LEVEL_W-1:0] level);
    mcode_t m;
    for (int b = 0; b < MCODE_W; b++) m[b] = (MCODE_W - b) <= 3 * int'(level);
    return m;
  endfunction

  // Leaf-voxel coordinate of a point coordinate.
  function automatic vcoord_t leaf_coord(logic [COORD_W-1:0] c);
    return c[COORD_W-1 -: DEPTH];
  endfunction

endpackage
