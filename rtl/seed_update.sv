// seed_update -- summary seed point of the already-sampled set.
//
// Farthest-point sampling picks each new point as the one farthest from the
// set S of points picked so far.  As in the paper, S is represented by one
// virtual summary point; this design takes that point to be the centroid of
// the leaf voxels of S, rounded to the nearest voxel, and returns its
// m-code as the seed of the next sampling round.
//
// Every `add` accumulates the X/Y/Z leaf-voxel coordinates of one picked
// voxel (decoded from its m-code) and the set size, then runs three
// restoring dividers in parallel, one quotient bit per cycle:
//     c_axis = (sum_axis + n/2) / n
// After SUM_W cycles (SUM_W = DEPTH + bits of KMAX) `seed_valid` pulses
// for one cycle with the new seed_mcode; `busy` is high meanwhile and
// further adds must wait.  `clear` forgets S.
//
// The paper calls the summary point the Euclidean norm of S and does not
// say how it is formed in hardware; the centroid, the rounding and the
// serial divider are choices of this design.
module seed_update
  import hgpcn_pkg::*;
#(
  parameter int KMAX = 4096               // largest set size to be summarised
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   add,
  input  mcode_t add_mcode,
  output logic   busy,
  output logic   seed_valid,
  output mcode_t seed_mcode
);
  localparam int N_W   = $clog2(KMAX + 1);
  localparam int SUM_W = DEPTH + N_W;
  localparam int CYC_W = $clog2(SUM_W + 1);

  logic [2:0][SUM_W-1:0] sum;
  logic [N_W-1:0]        n;
  logic [2:0][SUM_W-1:0] dvd;      // shifting dividend, becomes quotient
  logic [2:0][N_W:0]     rem;
  logic [CYC_W-1:0]      cyc;

  always_ff @(posedge clk) begin
    seed_valid <= 1'b0;
    if (!rst_n || clear) begin
      sum  <= '0;
      n    <= '0;
      busy <= 1'b0;
      cyc  <= '0;
      rem  <= '0;
      dvd  <= '0;
    end else if (!busy) begin
      if (add) begin
        for (int a = 0; a < 3; a++) begin
          sum[a] <= sum[a] + SUM_W'(morton_axis(add_mcode, a));
          dvd[a] <= sum[a] + SUM_W'(morton_axis(add_mcode, a)) + SUM_W'(N_W'(n + 1'b1) >> 1);
        end
        n    <= n + 1'b1;
        rem  <= '0;
        cyc  <= CYC_W'(SUM_W);
        busy <= 1'b1;
      end
    end else begin
      // one restoring-division step on all three axes
      for (int a = 0; a < 3; a++) begin
        logic [N_W+1:0] trial;
        trial = {rem[a], dvd[a][SUM_W-1]} - {2'b00, n};
        if (!trial[N_W+1]) begin
          rem[a] <= trial[N_W:0];
          dvd[a] <= {dvd[a][SUM_W-2:0], 1'b1};
        end else begin
          rem[a] <= {rem[a][N_W-1:0], dvd[a][SUM_W-1]};
          dvd[a] <= {dvd[a][SUM_W-2:0], 1'b0};
        end
      end
      cyc <= cyc - 1'b1;
      if (cyc == 1) begin
        busy       <= 1'b0;
        seed_valid <= 1'b1;
      end
    end
  end

  assign seed_mcode = morton_encode(vcoord_t'(dvd[0]), vcoord_t'(dvd[1]), vcoord_t'(dvd[2]));
endmodule
