// tb_ccss_top_ring: the end-to-end test of ccss_top_test.svh with the ring at
// its full length, 36 clusters, each cut down to 4 cores (144 cores). Core E
// sits in cluster 35, so its flit from cluster 0 travels 35 ring hops and
// passes every ring stop.
module tb_ccss_top_ring;
  import ccss_pkg::*;
  `include "ccss_tb_util.svh"
  localparam int NCL = DEF_N_CLUSTER, CS = 4;

  ccss_top #(.N_CLUSTER(NCL), .CLUSTER_SIZE(CS)) dut (.*);

  `include "ccss_top_test.svh"

  // watchdog: a hung run fails instead of stalling
  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
