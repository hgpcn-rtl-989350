// tb_bitonic_sorter -- sorts random key sets (with many repeated keys) on
// 8- and 32-input instances and compares with a reference sort; also checks
// that every payload stays attached to its key.
module tb_bitonic_sorter;
  localparam int KW = 6, PW = 8;
  logic [7:0][KW-1:0]  k8i, k8o;
  logic [7:0][PW-1:0]  p8i, p8o;
  logic [31:0][KW-1:0] k32i, k32o;
  logic [31:0][PW-1:0] p32i, p32o;
  int checks = 0, failures = 0;

  bitonic_sorter #(.N(8),  .KEY_W(KW), .PAY_W(PW)) dut8  (.key_in(k8i),  .pay_in(p8i),  .key_out(k8o),  .pay_out(p8o));
  bitonic_sorter #(.N(32), .KEY_W(KW), .PAY_W(PW)) dut32 (.key_in(k32i), .pay_in(p32i), .key_out(k32o), .pay_out(p32o));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int q8[$], q32[$];
      q8.delete(); q32.delete();
      for (int i = 0; i < 8; i++)  begin k8i[i]  = KW'($urandom % (t < 150 ? 8 : 64)); p8i[i]  = PW'(i);  q8.push_back(int'(k8i[i])); end
      for (int i = 0; i < 32; i++) begin k32i[i] = KW'($urandom % (t < 150 ? 8 : 64)); p32i[i] = PW'(i); q32.push_back(int'(k32i[i])); end
      #1;
      q8.rsort(); q32.rsort();
      for (int i = 0; i < 8; i++) begin
        checks += 2;
        if (int'(k8o[i]) != q8[i]) failures++;
        if (k8i[p8o[i][2:0]] != k8o[i]) failures++;
      end
      for (int i = 0; i < 32; i++) begin
        checks += 2;
        if (int'(k32o[i]) != q32[i]) failures++;
        if (k32i[p32o[i][4:0]] != k32o[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
