// tb_seed_update -- adds random voxels one at a time and compares each new
// seed with the rounded centroid computed in the testbench; also checks the
// division latency of SUM_W cycles.
module tb_seed_update;
  import hgpcn_pkg::*;
  localparam int KMAX  = 4096;
  localparam int SUM_W = DEPTH + $clog2(KMAX + 1);
  logic clk = 0, rst_n = 0, clear = 0, add = 0, busy, seed_valid;
  mcode_t add_mcode = '0, seed_mcode;
  int checks = 0, failures = 0;

  seed_update #(.KMAX(KMAX)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sx, sy, sz;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      sx = 0; sy = 0; sz = 0;
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int n = 1; n <= (run == 2 ? 2000 : 60); n++) begin
        int cyc;
        mcode_t m, e;
        m = mcode_t'({$urandom, $urandom});
        if (run == 1) m = '1;               // extreme corner: no overflow
        sx += longint'(morton_axis(m, 0)); sy += longint'(morton_axis(m, 1)); sz += longint'(morton_axis(m, 2));
        e = morton_encode(vcoord_t'((sx + longint'(n)/2) / longint'(n)), vcoord_t'((sy + longint'(n)/2) / longint'(n)), vcoord_t'((sz + longint'(n)/2) / longint'(n)));
        @(negedge clk); add = 1; add_mcode = m;
        @(negedge clk); add = 0;
        cyc = 1;
        while (!seed_valid) begin @(negedge clk); cyc++; end
        checks += 2;
        if (seed_mcode != e) begin
          failures++;
          if (failures < 5) $display("n=%0d seed %h exp %h", n, seed_mcode, e);
        end
        if (cyc != SUM_W + 1) begin
          failures++;
          if (failures < 5) $display("latency %0d exp %0d", cyc, SUM_W + 1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
