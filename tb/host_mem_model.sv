// host_mem_model -- behavioural model of the shared host memory read
// channel.  A request (req/addr) is granted after 0..MAX_GNT_WAIT random
// cycles; the point record from tb_cloud_pkg::pts follows LAT cycles after
// the grant as a one-cycle rvalid beat.  One request is served at a time.
module host_mem_model
  import hgpcn_pkg::*;
#(
  parameter int LAT          = 3,
  parameter int MAX_GNT_WAIT = 2
) (
  input  logic   clk,
  input  logic   req,
  input  paddr_t addr,
  output logic   gnt,
  output logic   rvalid,
  output point_t rdata,
  output int     n_reads
);
  initial begin
    gnt = 0; rvalid = 0; rdata = '0; n_reads = 0;
    forever begin
      @(posedge clk);
      #1;
      gnt = 0; rvalid = 0;
      if (req) begin
        paddr_t a;
        a = addr;
        repeat ($urandom % (MAX_GNT_WAIT + 1)) begin @(posedge clk); #1; end
        gnt = 1;
        @(posedge clk); #1;
        gnt = 0;
        repeat (LAT - 1) begin @(posedge clk); #1; end
        rdata  = (int'(a) < tb_cloud_pkg::pts.size()) ? tb_cloud_pkg::pts[a] : '0;
        rvalid = 1;
        n_reads++;
      end
    end
  end
endmodule
