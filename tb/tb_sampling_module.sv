// tb_sampling_module -- checks the Hamming distance of random m-code pairs
// at every level against a bit-by-bit count of the differing top bits.
module tb_sampling_module;
  import hgpcn_pkg::*;
  mcode_t             a, s;
  logic [LEVEL_W-1:0] lvl;
  logic [DIST_W-1:0]  hd;
  int checks = 0, failures = 0;

  sampling_module dut (.assigned_mcode(a), .seed_mcode(s), .level(lvl), .hdist(hd));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // paper's worked example (quadtree codes padded into the octree code):
    // equal prefixes give 0, all bits different give 3*level
    a = '0; s = '0; lvl = LEVEL_W'(DEPTH); #1;
    checks++; if (hd != 0) failures++;
    a = '1; s = '0; #1;
    checks++; if (hd != DIST_W'(MCODE_W)) failures++;
    for (int i = 0; i < 2000; i++) begin
      int exp;
      a   = mcode_t'({$urandom, $urandom});
      s   = mcode_t'({$urandom, $urandom});
      lvl = LEVEL_W'(1 + $urandom % DEPTH);
      #1;
      exp = 0;
      for (int b = 0; b < 3 * int'(lvl); b++) if (a[MCODE_W-1-b] != s[MCODE_W-1-b]) exp++;
      checks++;
      if (int'(hd) != exp) begin
        failures++;
        if (failures < 5) $display("mismatch a=%h s=%h l=%0d got %0d exp %0d", a, s, lvl, hd, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
