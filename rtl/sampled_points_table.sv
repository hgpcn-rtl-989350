// sampled_points_table -- Sampled-Points-Table (SPT).
//
// Records, in picking order, the host-memory addresses of the points chosen
// by the down-sampling unit.  The data structuring unit later reads them to
// fetch central points from host memory.  A counter tracks how many valid
// entries the table holds; `clear` empties it at the start of a frame.
//
// Timing: a write (we, widx, wdata) lands at the clock edge and bumps the
// count to widx+1 when it extends the table; a read (re, ridx) returns
// rdata one cycle later.  One write and one read port, as a simple
// dual-port block RAM provides.  The table and its purpose are the paper's;
// depth K defaults to the paper's example of 4096 sampled points.
module sampled_points_table
  import hgpcn_pkg::*;
#(
  parameter int K = 4096
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   we,
  input  logic [$clog2(K)-1:0]   widx,
  input  paddr_t                 wdata,
  input  logic                   re,
  input  logic [$clog2(K)-1:0]   ridx,
  output paddr_t                 rdata,
  output logic [$clog2(K):0]     count
);
  paddr_t mem [K];

  always_ff @(posedge clk) begin
    if (we) mem[widx] <= wdata;
    if (re) rdata <= mem[ridx];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear)                      count <= '0;
    else if (we && {1'b0, widx} >= count)     count <= {1'b0, widx} + 1'b1;
  end
endmodule
