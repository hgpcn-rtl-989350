// tb_mmio_regs -- writes every register and reads it back, loads table
// entries through TBL_LO/TBL_HI/TBL_IDX and checks the node written
// (dynamic fields initialised), start pulses and the sticky done bits.
module tb_mmio_regs;
  import hgpcn_pkg::*;
  localparam int K = 4096, KNN = 32;
  logic clk = 0, rst_n = 0, mmio_we = 0, mmio_re = 0, mmio_rvalid;
  logic [3:0] mmio_addr = '0;
  logic [63:0] mmio_wdata = '0, mmio_rdata;
  logic ois_start, dsu_start, tbl_we;
  logic [$clog2(K):0] k_target, n_central;
  mcode_t seed_mcode;
  logic [LEVEL_W-1:0] ve_level;
  logic [$clog2(KNN):0] knn_k;
  node_idx_t tbl_idx;
  node_t tbl_data;
  logic ois_busy = 0, ois_done = 0, ois_exhausted = 0, dsu_busy = 0, dsu_done = 0;
  logic [$clog2(K):0] spt_count = '0;
  int checks = 0, failures = 0;
  int n_ois_start = 0, n_dsu_start = 0;

  mmio_regs #(.K(K), .KNN(KNN)) dut (.*);
  always #5 clk = ~clk;
  always @(negedge clk) begin
    if (ois_start) n_ois_start++;
    if (dsu_start) n_dsu_start++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, logic [63:0] d);
    @(negedge clk); mmio_we = 1; mmio_addr = 4'(a); mmio_wdata = d;
    @(negedge clk); mmio_we = 0;
  endtask
  task automatic rd(int a, output logic [63:0] d);
    @(negedge clk); mmio_re = 1; mmio_addr = 4'(a);
    @(negedge clk); mmio_re = 0;
    d = mmio_rdata;
    checks++; if (!mmio_rvalid) begin failures++; $display("no rvalid"); end
  endtask

  initial begin
    logic [63:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wr(2, 64'd1000); wr(3, 64'h2345_6789); wr(4, 64'd77); wr(5, 64'd6); wr(6, 64'd16);
    rd(2, d); checks++; if (d != 64'd1000 || k_target != 13'd1000) failures++;
    rd(3, d); checks++; if (d != 64'h2345_6789 || seed_mcode != 30'h2345_6789) failures++;
    rd(4, d); checks++; if (d != 64'd77 || n_central != 13'd77) failures++;
    rd(5, d); checks++; if (d != 64'd6 || ve_level != 4'd6) failures++;
    rd(6, d); checks++; if (d != 64'd16 || knn_k != 6'd16) failures++;
    for (int t = 0; t < 50; t++) begin
      node_static_t s;
      s = node_static_t'({$urandom, $urandom, $urandom, $urandom});
      wr(7, {s.pt_addr, s.pt_cnt, s.child_base});
      wr(8, 64'({s.mcode, s.is_leaf, s.child_num}));
      wr(9, 64'(t * 3));
      checks += 3;
      if (tbl_idx != node_idx_t'(t * 3)) failures++;
      if (tbl_data.s != s) failures++;
      if (tbl_data.d.pts_left != s.pt_cnt || tbl_data.d.lo_off != '0) failures++;
    end
    wr(0, 64'd1); wr(0, 64'd2); wr(0, 64'd3);
    @(negedge clk);
    checks += 2; if (n_ois_start != 2) failures++; if (n_dsu_start != 2) failures++;
    @(negedge clk); ois_done = 1; spt_count = 13'd99; @(negedge clk); ois_done = 0;
    @(negedge clk); dsu_busy = 1;
    rd(1, d); checks++; if (d[4:0] != 5'b01010 || d[47:32] != 16'd99) begin failures++; $display("status %h", d); end
    wr(0, 64'd1);
    rd(1, d); checks++; if (d[1] != 1'b0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
