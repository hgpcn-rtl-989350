// octree_table -- on-chip Octree-Table of the down-sampling unit.
//
// Holds NODES octree nodes (node_t).  The host loads it before each frame;
// the down-sampling unit then updates the dynamic fields of the nodes it
// walks, and the data structuring unit reads it again for its neighbour
// searches.
//
// To let eight Sampling Modules score all children of a node at once, the
// table is split into FANOUT banks by index modulo 8.  Eight consecutive
// indices always fall in eight different banks, so one group read returns
// entries base..base+7 in a single cycle, whatever the alignment of base.
// Children of a node are stored at consecutive indices, so a group read at
// child_base returns all of them.
//
// Timing: rd_en at cycle t -> rd_data valid at t+1 (registered, read-first
// with respect to a same-cycle write).  One write per cycle (wr_en/wr_idx/
// wr_data).  Entries at base+j past the end of the table read as bank data
// of a wrapped index and must be ignored by the caller (it knows child_num).
//
// The banking and the single read/write port are this design's choices;
// the paper only says the Octree-Table sits on chip and is looked up by the
// Sampling Modules in parallel.
module octree_table
  import hgpcn_pkg::*;
#(
  parameter int NODES = 65536
) (
  input  logic                  clk,
  input  logic                  rd_en,
  input  node_idx_t             rd_base,
  output node_t [FANOUT-1:0]    rd_data,
  input  logic                  wr_en,
  input  node_idx_t             wr_idx,
  input  node_t                 wr_data
);
  localparam int BANK_DEPTH = NODES / FANOUT;
  localparam int BA_W       = (BANK_DEPTH > 1) ? $clog2(BANK_DEPTH) : 1;

  initial assert (NODES % FANOUT == 0 && NODES <= (1 << NODE_W))
    else $error("NODES must be a multiple of 8 and fit NODE_W");

  node_t           mem [FANOUT][BANK_DEPTH];
  node_t [FANOUT-1:0] bank_q;
  logic  [2:0]     base_lo_q;

  for (genvar b = 0; b < FANOUT; b++) begin : g_bank
    // index held by bank b within the group base..base+7
    logic [NODE_W:0] idx;
    logic [BA_W-1:0] ra;
    assign idx = {1'b0, rd_base} + (NODE_W+1)'((b - int'(rd_base[2:0]) + FANOUT) % FANOUT);
    assign ra  = BA_W'(idx[NODE_W:3]);

    always_ff @(posedge clk) begin
      if (rd_en) bank_q[b] <= mem[b][ra];
      if (wr_en && wr_idx[2:0] == 3'(b)) mem[b][BA_W'(wr_idx >> 3)] <= wr_data;
    end
  end

  always_ff @(posedge clk) if (rd_en) base_lo_q <= rd_base[2:0];

  // rotate bank order back to group order: entry j comes from bank (base+j)%8
  always_comb
    for (int j = 0; j < FANOUT; j++) rd_data[j] = bank_q[3'(int'(base_lo_q) + j)];
endmodule
