// sampling_module -- one Sampling Module of the down-sampling unit.
//
// It measures how far a candidate voxel lies from the current seed voxel as
// the Hamming distance between their Morton codes: the two codes are XORed
// and the ones of the result are counted.  Only the top 3*level bits take
// part, so a child at octree level `level` is compared with the seed's
// ancestor at that same level.  The XOR-based distance between an assigned
// m-code and a seed m-code is the paper's; the level mask and the popcount
// adder are this design's way of turning the XOR into a number.
//
// Interface: purely combinational.  assigned/seed are left-aligned m-codes,
// level is 1..DEPTH, hhdist is 0..MCODE_W.  Eight instances work side by side
// on the eight children of one node.
module sampling_module
  import hgpcn_pkg::*;
(
  input  mcode_t             assigned_mcode,
  input  mcode_t             seed_mcode,
  input  logic [LEVEL_W-1:0] level,
  output logic [DIST_W-1:0]  hdist
);
  mcode_t diff;

  always_comb begin
    diff = (assigned_mcode ^ seed_mcode) & level_mask(level);
    hdist = '0;
    for (int b = 0; b < MCODE_W; b++) hdist = hdist + DIST_W'(diff[b]);
  end
endmodule
