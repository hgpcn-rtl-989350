// input_buffer -- input buffer between the data structuring unit and the
// feature computation unit (the deep-learning accelerator).
//
// Holds one point-subset: up to KNN gathered points, the central point it
// belongs to and how many points it holds.  The data structuring unit
// writes points (we/widx/wdata) and then `commit`s the subset; the buffer
// becomes full and the accelerator may read it (rd_idx -> rd_data, one
// cycle later).  When the accelerator pulses `release` the buffer is free
// again.  While it is full, `free` is low and the data structuring unit
// stalls before writing the next subset.
//
// The paper says only that gathered points go to an input buffer for
// feature computation; the single-subset depth and the commit/release
// handshake are this design's choices.
module input_buffer
  import hgpcn_pkg::*;
#(
  parameter int KNN = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // writer: data structuring unit
  input  logic                   we,
  input  logic [$clog2(KNN)-1:0] widx,
  input  point_t                 wdata,
  input  logic                   commit,
  input  logic [$clog2(KNN):0]   commit_count,
  input  point_t                 commit_central,
  output logic                   free,
  // reader: feature computation unit
  output logic                   subset_valid,
  output logic [$clog2(KNN):0]   subset_count,
  output point_t                 subset_central,
  input  logic [$clog2(KNN)-1:0] rd_idx,
  output point_t                 rd_data,
  input  logic                   release_buf
);
  point_t mem [KNN];

  always_ff @(posedge clk) begin
    if (we && free) mem[widx] <= wdata;
    rd_data <= mem[rd_idx];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      subset_valid   <= 1'b0;
      subset_count   <= '0;
      subset_central <= '0;
    end else if (commit && !subset_valid) begin
      subset_valid   <= 1'b1;
      subset_count   <= commit_count;
      subset_central <= commit_central;
    end else if (release_buf) begin
      subset_valid   <= 1'b0;
    end
  end

  assign free = !subset_valid;

  a_no_write_when_full: assert property (@(posedge clk) disable iff (!rst_n)
    (we || commit) |-> free);
endmodule
