// bitonic_sorter -- combinational bitonic sorting network.
//
// Sorts N key/payload pairs so that the largest key comes out at index 0
// (descending order).  The network is Batcher's bitonic sorter: log2(N)
// merge phases of compare-exchange stages, N/2 comparators per stage,
// log2(N)*(log2(N)+1)/2 stages in all.  Callers that want the smallest
// value first invert their keys; callers that want a deterministic result
// among equal values append a tie-break field to the key.
//
// The down-sampling unit uses an 8-input instance to pick the farthest of
// the eight children scored by its Sampling Modules; the data structuring
// unit uses a wider one to keep the nearest candidates of the last voxel
// expansion.  The paper names a bitonic sorter for both jobs; its width and
// the single combinational stage (registered by the caller) are choices of
// this design.
//
// Interface: key_in/pay_in -> key_out/pay_out, no clock.  N must be a
// power of two.
module bitonic_sorter #(
  parameter int N     = 8,
  parameter int KEY_W = 8,
  parameter int PAY_W = 8
) (
  input  logic [N-1:0][KEY_W-1:0] key_in,
  input  logic [N-1:0][PAY_W-1:0] pay_in,
  output logic [N-1:0][KEY_W-1:0] key_out,
  output logic [N-1:0][PAY_W-1:0] pay_out
);
  initial assert (N >= 2 && (N & (N - 1)) == 0) else $error("N must be a power of two");

  always_comb begin
    logic [N-1:0][KEY_W-1:0] k;
    logic [N-1:0][PAY_W-1:0] p;
    logic [KEY_W-1:0] tk;
    logic [PAY_W-1:0] tp;
    logic             desc, swap;
    k    = key_in;
    p    = pay_in;
    tk   = '0;
    tp   = '0;
    desc = 1'b0;
    swap = 1'b0;
    for (int sz = 2; sz <= N; sz = sz * 2) begin
      for (int st = sz / 2; st > 0; st = st / 2) begin
        for (int i = 0; i < N; i++) begin
          if ((i ^ st) > i) begin
            desc = ((i & sz) == 0);
            swap = desc ? (k[i] < k[i ^ st]) : (k[i] > k[i ^ st]);
            if (swap) begin
              tk = k[i]; k[i] = k[i ^ st]; k[i ^ st] = tk;
              tp = p[i]; p[i] = p[i ^ st]; p[i ^ st] = tp;
            end
          end
        end
      end
    end
    key_out = k;
    pay_out = p;
  end
endmodule
